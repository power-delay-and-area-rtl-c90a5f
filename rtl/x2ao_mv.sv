// x2ao_mv: X2AO_MV, the full-adder-carry voter from discrete gates.
// V = (X xor Y)Z + XY, the carry output of a full adder: an XOR gate at the
// first level, two AND gates at the second and a two-input OR gate at the
// third. The two product terms are disjoint, so exactly one of them is 1
// whenever V is 1. Three logic levels, four cells.
// Interface: x, y and z are the three redundant copies of a WIDTH-bit signal,
// the outputs X, Y, Z of function modules 1-3 of a TMR stage; v is their
// bitwise 2-out-of-3 majority V. A fault on any one copy is masked.
// Timing: purely combinational, no clock; v follows the inputs after the gate
// delays of the cells (not modelled in simulation).
// The gate network is the published schematic for this voter, one cell
// instance per gate. WIDTH, which replicates the one-bit voter per bit, is
// this design's addition; its default 1 is the voter as published.
module x2ao_mv #(
  parameter int unsigned WIDTH = 1
) (
  input  logic [WIDTH-1:0] x,
  input  logic [WIDTH-1:0] y,
  input  logic [WIDTH-1:0] z,
  output logic [WIDTH-1:0] v
);
  logic [WIDTH-1:0] p;
  logic [WIDTH-1:0] pz;
  logic [WIDTH-1:0] xy;

  cell_xor2 #(.W(WIDTH)) u_xor (.a(x), .b(y), .y(p));
  cell_and2 #(.W(WIDTH)) u_and_pz (.a(p), .b(z), .y(pz));
  cell_and2 #(.W(WIDTH)) u_and_xy (.a(x), .b(y), .y(xy));
  cell_or2 #(.W(WIDTH)) u_or (.a(pz), .b(xy), .y(v));

endmodule
