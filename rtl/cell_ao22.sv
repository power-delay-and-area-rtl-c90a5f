// cell_ao22: AND-OR 2-2 complex gate standard cell of the voter cell library.
// Function: y = ab + cd.
// It is evaluated bit by bit on W-bit buses (W = 1 is the single cell used
// in the voter schematics). Purely combinational; no cell
// delay, drive strength or power is modelled. The majority voters instantiate
// one of these per gate of their schematic, and keep_hierarchy asks synthesis
// to leave the cell boundary in place, so that the voter netlist has the same
// gate structure as its schematic instead of being re-optimised into a
// generic majority function.
(* keep_hierarchy *)
module cell_ao22 #(
  parameter int unsigned W = 1
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  input  logic [W-1:0] d,
  output logic [W-1:0] y
);
  assign y = (a & b) | (c & d);
endmodule
