// cell_mux4: 4:1 multiplexer standard cell of the voter cell library.
// Function: y = d{s1,s0}: d0 for 00, d1 for 01, d2 for 10, d3 for 11.
// It is evaluated bit by bit on W-bit buses (W = 1 is the single cell used
// in the voter schematics). Purely combinational; no cell
// delay, drive strength or power is modelled. The majority voters instantiate
// one of these per gate of their schematic, and keep_hierarchy asks synthesis
// to leave the cell boundary in place, so that the voter netlist has the same
// gate structure as its schematic instead of being re-optimised into a
// generic majority function.
(* keep_hierarchy *)
module cell_mux4 #(
  parameter int unsigned W = 1
) (
  input  logic [W-1:0] d0,
  input  logic [W-1:0] d1,
  input  logic [W-1:0] d2,
  input  logic [W-1:0] d3,
  input  logic [W-1:0] s1,
  input  logic [W-1:0] s0,
  output logic [W-1:0] y
);
  assign y = (d0 & ~s1 & ~s0) | (d1 & ~s1 & s0) | (d2 & s1 & ~s0) | (d3 & s1 & s0);
endmodule
