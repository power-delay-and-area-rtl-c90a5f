// ao222_mv: AO222_MV, the single AO222 complex gate voter.
// One AO222 complex gate (G7) sums the three pair products:
// V = XY + YZ + XZ. One cell.
// Interface: x, y and z are the three redundant copies of a WIDTH-bit signal,
// the outputs X, Y, Z of function modules 1-3 of a TMR stage; v is their
// bitwise 2-out-of-3 majority V. A fault on any one copy is masked.
// Timing: purely combinational, no clock; v follows the inputs after the gate
// delays of the cells (not modelled in simulation).
// The gate network is the published schematic for this voter, one cell
// instance per gate. WIDTH, which replicates the one-bit voter per bit, is
// this design's addition; its default 1 is the voter as published.
module ao222_mv #(
  parameter int unsigned WIDTH = 1
) (
  input  logic [WIDTH-1:0] x,
  input  logic [WIDTH-1:0] y,
  input  logic [WIDTH-1:0] z,
  output logic [WIDTH-1:0] v
);

  cell_ao222 #(.W(WIDTH)) u_g7 (.a(x), .b(y), .c(y), .d(z), .e(x), .f(z), .y(v));

endmodule
