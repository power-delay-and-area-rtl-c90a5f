// ao_mv: AO_MV, the classical majority voter.
// Three two-input AND gates form the pair products XY, YZ and XZ and a
// three-input OR gate sums them: V = XY + YZ + XZ, the sum of all majority
// clauses. Two logic levels, four cells.
// Interface: x, y and z are the three redundant copies of a WIDTH-bit signal,
// the outputs X, Y, Z of function modules 1-3 of a TMR stage; v is their
// bitwise 2-out-of-3 majority V. A fault on any one copy is masked.
// Timing: purely combinational, no clock; v follows the inputs after the gate
// delays of the cells (not modelled in simulation).
// The gate network is the published schematic for this voter, one cell
// instance per gate. WIDTH, which replicates the one-bit voter per bit, is
// this design's addition; its default 1 is the voter as published.
module ao_mv #(
  parameter int unsigned WIDTH = 1
) (
  input  logic [WIDTH-1:0] x,
  input  logic [WIDTH-1:0] y,
  input  logic [WIDTH-1:0] z,
  output logic [WIDTH-1:0] v
);
  logic [WIDTH-1:0] xy;
  logic [WIDTH-1:0] yz;
  logic [WIDTH-1:0] xz;

  cell_and2 #(.W(WIDTH)) u_and_xy (.a(x), .b(y), .y(xy));
  cell_and2 #(.W(WIDTH)) u_and_yz (.a(y), .b(z), .y(yz));
  cell_and2 #(.W(WIDTH)) u_and_xz (.a(x), .b(z), .y(xz));
  cell_or3 #(.W(WIDTH)) u_or (.a(xy), .b(yz), .c(xz), .y(v));

endmodule
