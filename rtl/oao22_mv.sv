// oao22_mv: OAO22_MV, the OR plus AO22 voter.
// V = (X + Y)Z + XY, the factored form of the majority equation: an OR gate
// on X, Y feeds one AND pair of an AO22 complex gate (G1), whose other pair
// is X, Y. Two cells.
// Interface: x, y and z are the three redundant copies of a WIDTH-bit signal,
// the outputs X, Y, Z of function modules 1-3 of a TMR stage; v is their
// bitwise 2-out-of-3 majority V. A fault on any one copy is masked.
// Timing: purely combinational, no clock; v follows the inputs after the gate
// delays of the cells (not modelled in simulation).
// The gate network is the published schematic for this voter, one cell
// instance per gate. WIDTH, which replicates the one-bit voter per bit, is
// this design's addition; its default 1 is the voter as published.
module oao22_mv #(
  parameter int unsigned WIDTH = 1
) (
  input  logic [WIDTH-1:0] x,
  input  logic [WIDTH-1:0] y,
  input  logic [WIDTH-1:0] z,
  output logic [WIDTH-1:0] v
);
  logic [WIDTH-1:0] s;

  cell_or2 #(.W(WIDTH)) u_or (.a(x), .b(y), .y(s));
  cell_ao22 #(.W(WIDTH)) u_g1 (.a(s), .b(z), .c(x), .d(y), .y(v));

endmodule
