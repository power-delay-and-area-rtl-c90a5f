// xao22_mv: XAO22_MV, the XOR plus AO22 voter.
// V = (X xor Y)Z + XY as in X2AO_MV, but the two AND gates and the OR gate
// are merged into one AO22 complex gate (G1, y = ab + cd). Two cells.
// Interface: x, y and z are the three redundant copies of a WIDTH-bit signal,
// the outputs X, Y, Z of function modules 1-3 of a TMR stage; v is their
// bitwise 2-out-of-3 majority V. A fault on any one copy is masked.
// Timing: purely combinational, no clock; v follows the inputs after the gate
// delays of the cells (not modelled in simulation).
// The gate network is the published schematic for this voter, one cell
// instance per gate. WIDTH, which replicates the one-bit voter per bit, is
// this design's addition; its default 1 is the voter as published.
module xao22_mv #(
  parameter int unsigned WIDTH = 1
) (
  input  logic [WIDTH-1:0] x,
  input  logic [WIDTH-1:0] y,
  input  logic [WIDTH-1:0] z,
  output logic [WIDTH-1:0] v
);
  logic [WIDTH-1:0] p;

  cell_xor2 #(.W(WIDTH)) u_xor (.a(x), .b(y), .y(p));
  cell_ao22 #(.W(WIDTH)) u_g1 (.a(p), .b(z), .c(x), .d(y), .y(v));

endmodule
