// bn_mv: BN_MV, the Ban-Naviner XOR/MUX voter.
// X xor Y drives the select of a 2:1 MUX. When X and Y agree (select 0)
// the MUX passes Y, which is then the majority; when they disagree
// (select 1) Z breaks the tie and is passed. Two cells.
// Interface: x, y and z are the three redundant copies of a WIDTH-bit signal,
// the outputs X, Y, Z of function modules 1-3 of a TMR stage; v is their
// bitwise 2-out-of-3 majority V. A fault on any one copy is masked.
// Timing: purely combinational, no clock; v follows the inputs after the gate
// delays of the cells (not modelled in simulation).
// The gate network is the published schematic for this voter, one cell
// instance per gate. WIDTH, which replicates the one-bit voter per bit, is
// this design's addition; its default 1 is the voter as published.
module bn_mv #(
  parameter int unsigned WIDTH = 1
) (
  input  logic [WIDTH-1:0] x,
  input  logic [WIDTH-1:0] y,
  input  logic [WIDTH-1:0] z,
  output logic [WIDTH-1:0] v
);
  logic [WIDTH-1:0] sel;

  cell_xor2 #(.W(WIDTH)) u_xor (.a(x), .b(y), .y(sel));
  cell_mux2 #(.W(WIDTH)) u_mux (.d0(y), .d1(z), .s(sel), .y(v));

endmodule
