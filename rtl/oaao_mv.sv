// oaao_mv: OAAO_MV, the OA21 plus AO21 dual complex gate voter.
// An OA21 gate (G3) forms N = (X + Y)Z and an AO21 gate (G4) forms
// V = XY + N, which is (X + Y)Z + XY. Two cells, no simple gates.
// Interface: x, y and z are the three redundant copies of a WIDTH-bit signal,
// the outputs X, Y, Z of function modules 1-3 of a TMR stage; v is their
// bitwise 2-out-of-3 majority V. A fault on any one copy is masked.
// Timing: purely combinational, no clock; v follows the inputs after the gate
// delays of the cells (not modelled in simulation).
// The gate network is the published schematic for this voter, one cell
// instance per gate. WIDTH, which replicates the one-bit voter per bit, is
// this design's addition; its default 1 is the voter as published.
module oaao_mv #(
  parameter int unsigned WIDTH = 1
) (
  input  logic [WIDTH-1:0] x,
  input  logic [WIDTH-1:0] y,
  input  logic [WIDTH-1:0] z,
  output logic [WIDTH-1:0] v
);
  logic [WIDTH-1:0] n;

  cell_oa21 #(.W(WIDTH)) u_g3 (.a(x), .b(y), .c(z), .y(n));
  cell_ao21 #(.W(WIDTH)) u_g4 (.a(x), .b(y), .c(n), .y(v));

endmodule
