// cell_mux2: 2:1 multiplexer standard cell of the voter cell library.
// Function: y = d0 when s = 0, d1 when s = 1.
// It is evaluated bit by bit on W-bit buses (W = 1 is the single cell used
// in the voter schematics). Purely combinational; no cell
// delay, drive strength or power is modelled. The majority voters instantiate
// one of these per gate of their schematic, and keep_hierarchy asks synthesis
// to leave the cell boundary in place, so that the voter netlist has the same
// gate structure as its schematic instead of being re-optimised into a
// generic majority function.
(* keep_hierarchy *)
module cell_mux2 #(
  parameter int unsigned W = 1
) (
  input  logic [W-1:0] d0,
  input  logic [W-1:0] d1,
  input  logic [W-1:0] s,
  output logic [W-1:0] y
);
  assign y = (d0 & ~s) | (d1 & s);
endmodule
