// aoa22_mv: AOA22_MV, the AND plus OA22 voter.
// V = (X + YZ)(Y + Z): an AND gate forms YZ, and an OA22 complex gate (G2,
// y = (a + b)(c + d)) combines it with X and with the pair Y, Z. Two cells.
// Interface: x, y and z are the three redundant copies of a WIDTH-bit signal,
// the outputs X, Y, Z of function modules 1-3 of a TMR stage; v is their
// bitwise 2-out-of-3 majority V. A fault on any one copy is masked.
// Timing: purely combinational, no clock; v follows the inputs after the gate
// delays of the cells (not modelled in simulation).
// The gate network is the published schematic for this voter, one cell
// instance per gate. WIDTH, which replicates the one-bit voter per bit, is
// this design's addition; its default 1 is the voter as published.
module aoa22_mv #(
  parameter int unsigned WIDTH = 1
) (
  input  logic [WIDTH-1:0] x,
  input  logic [WIDTH-1:0] y,
  input  logic [WIDTH-1:0] z,
  output logic [WIDTH-1:0] v
);
  logic [WIDTH-1:0] yz;

  cell_and2 #(.W(WIDTH)) u_and (.a(y), .b(z), .y(yz));
  cell_oa22 #(.W(WIDTH)) u_g2 (.a(x), .b(yz), .c(y), .d(z), .y(v));

endmodule
