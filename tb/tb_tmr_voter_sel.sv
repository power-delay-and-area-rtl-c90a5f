// tb_tmr_voter_sel: checks the VOTER selection and the WIDTH parameter of
// tmr_voter_top. Fourteen 8-bit instances are built, one per value of
// mv_pkg::voter_e, all fed the same random x, y, z. For each instance v
// must equal v_all[VOTER] and the bitwise majority (counted independently),
// so every voter structure is exercised as the selected one. 1000 random
// vectors plus the all-single-fault pattern set are applied.
module tb_tmr_voter_sel;
  import mv_pkg::*;

  localparam int unsigned W = 8;

  logic [W-1:0]                 x, y, z;
  logic [W-1:0]                 v     [NUM_VOTERS];
  logic [NUM_VOTERS-1:0][W-1:0] v_all [NUM_VOTERS];
  int                           checks   = 0;
  int                           failures = 0;

  for (genvar k = 0; k < NUM_VOTERS; k++) begin : g_sel
    tmr_voter_top #(.WIDTH(W), .VOTER(voter_e'(k))) dut (
      .x(x), .y(y), .z(z), .v(v[k]), .v_all(v_all[k])
    );
  end

  function automatic logic [W-1:0] maj(input logic [W-1:0] a, b, c);
    logic [W-1:0] r;
    for (int i = 0; i < W; i++) r[i] = (32'(a[i]) + 32'(b[i]) + 32'(c[i])) >= 2;
    return r;
  endfunction

  task automatic check_vec();
    for (int k = 0; k < NUM_VOTERS; k++) begin
      checks++;
      if (v[k] !== maj(x, y, z) || v[k] !== v_all[k][k]) begin
        failures++;
        $display("FAIL VOTER=%s: v=%h v_all=%h expected %h", voter_e'(k), v[k], v_all[k][k], maj(x, y, z));
      end
    end
  endtask

  initial begin
    logic [W-1:0] word;
    for (int n = 0; n < 1000; n++) begin
      x = W'($urandom); y = W'($urandom); z = W'($urandom);
      #1;
      check_vec();
    end
    for (int n = 0; n < 300; n++) begin
      word = W'($urandom);
      x = word; y = word; z = word;
      case (n % 3)
        0:       x = ~word;
        1:       y = ~word;
        default: z = ~word;
      endcase
      #1;
      check_vec();
      checks++;
      if (v[OA222_MV] !== word) begin
        failures++;
        $display("FAIL: single inverted copy not masked");
      end
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
