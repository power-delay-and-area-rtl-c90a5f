// mux41_mv: MUX41_MV, the 4:1 MUX voter.
// X and Y drive the two select lines of a 4:1 MUX whose data inputs are
// 0 = X, 1 = Z, 2 = Z, 3 = Y: for XY = 00 the output is X (0), for 11 it is
// Y (1), and for the two disagreeing cases Z decides. X on the high select
// bit is this design's choice; the published schematic does not say, and
// the two middle inputs being equal makes the order irrelevant. One cell.
// Interface: x, y and z are the three redundant copies of a WIDTH-bit signal,
// the outputs X, Y, Z of function modules 1-3 of a TMR stage; v is their
// bitwise 2-out-of-3 majority V. A fault on any one copy is masked.
// Timing: purely combinational, no clock; v follows the inputs after the gate
// delays of the cells (not modelled in simulation).
// The gate network is the published schematic for this voter, one cell
// instance per gate. WIDTH, which replicates the one-bit voter per bit, is
// this design's addition; its default 1 is the voter as published.
module mux41_mv #(
  parameter int unsigned WIDTH = 1
) (
  input  logic [WIDTH-1:0] x,
  input  logic [WIDTH-1:0] y,
  input  logic [WIDTH-1:0] z,
  output logic [WIDTH-1:0] v
);

  cell_mux4 #(.W(WIDTH)) u_mux (.d0(x), .d1(z), .d2(z), .d3(y), .s1(x), .s0(y), .y(v));

endmodule
