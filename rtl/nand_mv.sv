// nand_mv: NAND_MV, the all-NAND form of the classical voter.
// Three two-input NAND gates on the pairs XY, YZ and XZ feed a three-input
// NAND gate. By De Morgan this is again V = XY + YZ + XZ, built from
// inverting gates only. Two logic levels, four cells.
// Interface: x, y and z are the three redundant copies of a WIDTH-bit signal,
// the outputs X, Y, Z of function modules 1-3 of a TMR stage; v is their
// bitwise 2-out-of-3 majority V. A fault on any one copy is masked.
// Timing: purely combinational, no clock; v follows the inputs after the gate
// delays of the cells (not modelled in simulation).
// The gate network is the published schematic for this voter, one cell
// instance per gate. WIDTH, which replicates the one-bit voter per bit, is
// this design's addition; its default 1 is the voter as published.
module nand_mv #(
  parameter int unsigned WIDTH = 1
) (
  input  logic [WIDTH-1:0] x,
  input  logic [WIDTH-1:0] y,
  input  logic [WIDTH-1:0] z,
  output logic [WIDTH-1:0] v
);
  logic [WIDTH-1:0] nxy;
  logic [WIDTH-1:0] nyz;
  logic [WIDTH-1:0] nxz;

  cell_nand2 #(.W(WIDTH)) u_nand_xy (.a(x), .b(y), .y(nxy));
  cell_nand2 #(.W(WIDTH)) u_nand_yz (.a(y), .b(z), .y(nyz));
  cell_nand2 #(.W(WIDTH)) u_nand_xz (.a(x), .b(z), .y(nxz));
  cell_nand3 #(.W(WIDTH)) u_nand_out (.a(nxy), .b(nyz), .c(nxz), .y(v));

endmodule
