// tb_tmr_voter_top: end-to-end testbench of the TMR voting stage at its
// default parameters (WIDTH = 1, VOTER = OA222_MV).
// The testbench plays the three function modules: a reference bit f is drawn
// at random each nanosecond, copied to x, y and z, and faults are injected
// into none, one or two of the copies. Every vector is held for 1 ns, the
// 1 GHz input rate used when the voters were characterised, and the run
// applies the 8-row truth table followed by 1200 random TMR vectors
// (more than the 1000 random vectors of that characterisation).
// Checked on every vector: all 14 entries of v_all equal the majority of
// x, y, z (counted independently), v equals the OA222_MV entry, a single
// faulty copy is masked (v = f), and two faulty copies out-vote the good
// one (v = NOT f), the limit of TMR. Each of the five situations (no fault,
// fault on copy 1, 2 or 3, double fault) is counted and must occur.
module tb_tmr_voter_top;
  import mv_pkg::*;

  timeunit 1ns;
  timeprecision 1ps;

  logic                           x, y, z, v;
  logic [NUM_VOTERS-1:0][0:0]     v_all;
  int                             checks   = 0;
  int                             failures = 0;
  int                             n_clean  = 0;
  int                             n_single [3] = '{0, 0, 0};
  int                             n_double = 0;

  tmr_voter_top dut (.x(x), .y(y), .z(z), .v(v), .v_all(v_all));

  function automatic logic maj3(input logic a, b, c);
    int unsigned ones;
    ones = 32'(a) + 32'(b) + 32'(c);
    return ones >= 2;
  endfunction

  task automatic check_all(input logic exp_v, input string what);
    for (int k = 0; k < NUM_VOTERS; k++) begin
      checks++;
      if (v_all[k][0] !== maj3(x, y, z)) begin
        failures++;
        $display("FAIL %s: voter %s gave %b for xyz=%b%b%b", what,
                 voter_e'(k), v_all[k][0], x, y, z);
      end
    end
    checks++;
    if (v !== v_all[OA222_MV][0]) begin
      failures++;
      $display("FAIL %s: v=%b but OA222_MV gives %b", what, v, v_all[OA222_MV][0]);
    end
    checks++;
    if (v !== exp_v) begin
      failures++;
      $display("FAIL %s: v=%b expected %b (xyz=%b%b%b)", what, v, exp_v, x, y, z);
    end
  endtask

  initial begin
    logic        f;
    logic [2:0]  flip;
    int unsigned kind;
    x = 1'b0; y = 1'b0; z = 1'b0;
    for (int i = 0; i < 8; i++) begin
      {x, y, z} = 3'(i);
      #1ns;
      check_all(maj3(x, y, z), "truth table");
    end
    for (int n = 0; n < 1200; n++) begin
      f    = 1'($urandom);
      kind = $urandom_range(4);
      case (kind)
        0:       flip = 3'b000;
        1:       flip = 3'b100;
        2:       flip = 3'b010;
        3:       flip = 3'b001;
        default: begin
          case ($urandom_range(2))
            0:       flip = 3'b110;
            1:       flip = 3'b011;
            default: flip = 3'b101;
          endcase
        end
      endcase
      x = f ^ flip[2];
      y = f ^ flip[1];
      z = f ^ flip[0];
      #1ns;
      case ($countones(flip))
        0: begin n_clean++;  check_all(f, "no fault"); end
        1: begin
          if (flip[2]) n_single[0]++;
          if (flip[1]) n_single[1]++;
          if (flip[0]) n_single[2]++;
          check_all(f, "single fault masked");
        end
        default: begin n_double++; check_all(~f, "double fault out-votes"); end
      endcase
    end
    $display("situations: no fault %0d, fault on copy 1 %0d, copy 2 %0d, copy 3 %0d, double fault %0d",
             n_clean, n_single[0], n_single[1], n_single[2], n_double);
    checks++;
    if (n_clean == 0 || n_single[0] == 0 || n_single[1] == 0 || n_single[2] == 0 || n_double == 0) begin
      failures++;
      $display("FAIL: a fault situation never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #20us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
