// tmr_voter_top: majority-voting stage of a triple modular redundancy (TMR)
// scheme, with all 14 voter structures side by side.
// Three identical function modules (not part of this RTL) deliver the
// redundant copies x, y and z of a WIDTH-bit result. Every voter in the
// bank receives the same three copies, as in the comparison the voters were
// characterised with, and each drives its own slot of v_all, indexed by
// mv_pkg::voter_e. The VOTER parameter picks the voter whose output is the
// stage's result v. Its default is OA222_MV, the single OA222 complex gate,
// which had the best power-delay-area figure of merit among the 14; the
// choice of default and the side-by-side bank are this design's, the voter
// structures themselves follow the published schematics.
// Interface: x, y, z in; v and v_all out. All 14 outputs are equal for every
// input (they are the same Boolean function built 14 ways); they can differ
// only when a gate inside one voter is itself faulty.
// Timing: purely combinational, no clock or reset. A wrapper that needs only
// one voter can tie v_all off and let synthesis remove the other 13.
module tmr_voter_top
  import mv_pkg::*;
#(
  parameter int unsigned WIDTH = 1,
  parameter voter_e      VOTER = OA222_MV
) (
  input  logic [WIDTH-1:0]                 x,
  input  logic [WIDTH-1:0]                 y,
  input  logic [WIDTH-1:0]                 z,
  output logic [WIDTH-1:0]                 v,
  output logic [NUM_VOTERS-1:0][WIDTH-1:0] v_all
);

  ao_mv    #(.WIDTH(WIDTH)) u_ao_mv    (.x(x), .y(y), .z(z), .v(v_all[AO_MV]));
  nand_mv  #(.WIDTH(WIDTH)) u_nand_mv  (.x(x), .y(y), .z(z), .v(v_all[NAND_MV]));
  kp_mv    #(.WIDTH(WIDTH)) u_kp_mv    (.x(x), .y(y), .z(z), .v(v_all[KP_MV]));
  bn_mv    #(.WIDTH(WIDTH)) u_bn_mv    (.x(x), .y(y), .z(z), .v(v_all[BN_MV]));
  xnm_mv   #(.WIDTH(WIDTH)) u_xnm_mv   (.x(x), .y(y), .z(z), .v(v_all[XNM_MV]));
  x2ao_mv  #(.WIDTH(WIDTH)) u_x2ao_mv  (.x(x), .y(y), .z(z), .v(v_all[X2AO_MV]));
  xao22_mv #(.WIDTH(WIDTH)) u_xao22_mv (.x(x), .y(y), .z(z), .v(v_all[XAO22_MV]));
  oao22_mv #(.WIDTH(WIDTH)) u_oao22_mv (.x(x), .y(y), .z(z), .v(v_all[OAO22_MV]));
  aoa22_mv #(.WIDTH(WIDTH)) u_aoa22_mv (.x(x), .y(y), .z(z), .v(v_all[AOA22_MV]));
  oaao_mv  #(.WIDTH(WIDTH)) u_oaao_mv  (.x(x), .y(y), .z(z), .v(v_all[OAAO_MV]));
  aooa_mv  #(.WIDTH(WIDTH)) u_aooa_mv  (.x(x), .y(y), .z(z), .v(v_all[AOOA_MV]));
  ao222_mv #(.WIDTH(WIDTH)) u_ao222_mv (.x(x), .y(y), .z(z), .v(v_all[AO222_MV]));
  oa222_mv #(.WIDTH(WIDTH)) u_oa222_mv (.x(x), .y(y), .z(z), .v(v_all[OA222_MV]));
  mux41_mv #(.WIDTH(WIDTH)) u_mux41_mv (.x(x), .y(y), .z(z), .v(v_all[MUX41_MV]));

  assign v = v_all[VOTER];

endmodule
