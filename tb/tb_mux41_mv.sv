// tb_mux41_mv: self-checking testbench for the MUX41_MV majority voter.
// Reference: the 2-out-of-3 majority of x, y, z, found by counting the ones
// in each bit position, independent of any voter equation.
// Tests, in order: (1) the full 8-row truth table of the one-bit voter at its
// default width; (2) at WIDTH = 16, every single-copy fault (one copy of a
// random word corrupted by a random nonzero mask) must be masked, i.e. v
// equals the uncorrupted word; (3) 2000 fully random 16-bit triples.
// The voter is combinational, so each vector is held for one time unit
// before v is sampled. A watchdog ends the run as a failure if the test
// does not finish in time.
module tb_mux41_mv;

  localparam int unsigned WN = 16;

  logic          x1, y1, z1, v1;
  logic [WN-1:0] xn, yn, zn, vn;
  int            checks   = 0;
  int            failures = 0;

  mux41_mv dut1 (.x(x1), .y(y1), .z(z1), .v(v1));
  mux41_mv #(.WIDTH(WN)) dutn (.x(xn), .y(yn), .z(zn), .v(vn));

  function automatic logic [WN-1:0] maj(input logic [WN-1:0] a, b, c);
    logic [WN-1:0] r;
    for (int i = 0; i < WN; i++) begin
      int unsigned ones;
      ones = 32'(a[i]) + 32'(b[i]) + 32'(c[i]);
      r[i] = (ones >= 2);
    end
    return r;
  endfunction

  task automatic check(input logic [WN-1:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h (x=%h y=%h z=%h)", what, got, exp, xn, yn, zn);
    end
  endtask

  initial begin
    logic [WN-1:0] word, mask;
    int unsigned   which;
    x1 = 1'b0; y1 = 1'b0; z1 = 1'b0;
    xn = '0;   yn = '0;   zn = '0;
    // (1) truth table
    for (int i = 0; i < 8; i++) begin
      {x1, y1, z1} = 3'(i);
      #1;
      check(WN'(v1), maj(WN'(x1), WN'(y1), WN'(z1)), $sformatf("truth table row %0d", i));
    end
    // (2) single-copy faults are masked
    for (int n = 0; n < 500; n++) begin
      word  = WN'($urandom);
      mask  = WN'($urandom);
      if (mask == '0) mask = WN'(1);
      which = $urandom_range(2);
      xn = word; yn = word; zn = word;
      case (which)
        0:       xn = word ^ mask;
        1:       yn = word ^ mask;
        default: zn = word ^ mask;
      endcase
      #1;
      check(vn, word, $sformatf("fault on copy %0d masked", which + 1));
    end
    // (3) random triples
    for (int n = 0; n < 2000; n++) begin
      xn = WN'($urandom); yn = WN'($urandom); zn = WN'($urandom);
      #1;
      check(vn, maj(xn, yn, zn), "random triple");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
