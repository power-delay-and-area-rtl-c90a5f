// kp_mv: KP_MV, the priority-encoding voter.
// Two XOR gates compare the neighbouring copies: d_xy = X xor Y and
// d_yz = Y xor Z. A priority encoder made of an inverter and an AND gate
// forms sel = d_xy AND NOT d_yz, which is 1 only when X differs from Y
// while Y equals Z. A 2:1 MUX then passes X (sel = 0) or Z (sel = 1).
// If X = Y, X is the majority; if X != Y = Z, Z is; if X != Y != Z then
// X = Z and either is right. The MUX input numbering (X on 0, Z on 1)
// follows the published schematic; which encoder input carries the inverter
// is not marked there and was fixed here as the only choice that votes
// correctly. Four logic levels, five cells, the deepest voter of the set.
// Interface: x, y and z are the three redundant copies of a WIDTH-bit signal,
// the outputs X, Y, Z of function modules 1-3 of a TMR stage; v is their
// bitwise 2-out-of-3 majority V. A fault on any one copy is masked.
// Timing: purely combinational, no clock; v follows the inputs after the gate
// delays of the cells (not modelled in simulation).
// The gate network is the published schematic for this voter, one cell
// instance per gate. WIDTH, which replicates the one-bit voter per bit, is
// this design's addition; its default 1 is the voter as published.
module kp_mv #(
  parameter int unsigned WIDTH = 1
) (
  input  logic [WIDTH-1:0] x,
  input  logic [WIDTH-1:0] y,
  input  logic [WIDTH-1:0] z,
  output logic [WIDTH-1:0] v
);
  logic [WIDTH-1:0] d_xy;
  logic [WIDTH-1:0] d_yz;
  logic [WIDTH-1:0] n_d_yz;
  logic [WIDTH-1:0] sel;

  cell_xor2 #(.W(WIDTH)) u_xor_xy (.a(x), .b(y), .y(d_xy));
  cell_xor2 #(.W(WIDTH)) u_xor_yz (.a(y), .b(z), .y(d_yz));
  cell_inv #(.W(WIDTH)) u_pe_inv (.a(d_yz), .y(n_d_yz));
  cell_and2 #(.W(WIDTH)) u_pe_and (.a(d_xy), .b(n_d_yz), .y(sel));
  cell_mux2 #(.W(WIDTH)) u_mux (.d0(x), .d1(z), .s(sel), .y(v));

endmodule
