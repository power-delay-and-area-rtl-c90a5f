// xnm_mv: XNM_MV, the XNOR/MUX voter.
// X xnor Y drives the select of a 2:1 MUX. Select 1 means X = Y and the MUX
// passes Y; select 0 means X != Y and Z, the tie breaker, is passed. The
// same function as BN_MV with an XNOR and swapped MUX inputs; Z on MUX input
// 0 follows the schematic, and taking Y (rather than X) for input 1 is this
// design's choice, equivalent because that input is used only when X = Y.
// Two cells.
// Interface: x, y and z are the three redundant copies of a WIDTH-bit signal,
// the outputs X, Y, Z of function modules 1-3 of a TMR stage; v is their
// bitwise 2-out-of-3 majority V. A fault on any one copy is masked.
// Timing: purely combinational, no clock; v follows the inputs after the gate
// delays of the cells (not modelled in simulation).
// The gate network is the published schematic for this voter, one cell
// instance per gate. WIDTH, which replicates the one-bit voter per bit, is
// this design's addition; its default 1 is the voter as published.
module xnm_mv #(
  parameter int unsigned WIDTH = 1
) (
  input  logic [WIDTH-1:0] x,
  input  logic [WIDTH-1:0] y,
  input  logic [WIDTH-1:0] z,
  output logic [WIDTH-1:0] v
);
  logic [WIDTH-1:0] sel;

  cell_xnor2 #(.W(WIDTH)) u_xnor (.a(x), .b(y), .y(sel));
  cell_mux2 #(.W(WIDTH)) u_mux (.d0(z), .d1(y), .s(sel), .y(v));

endmodule
