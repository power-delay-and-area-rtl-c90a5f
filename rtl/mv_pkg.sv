// mv_pkg: names shared by the majority-voter bank and its testbenches.
// voter_e numbers the 14 voter structures in the order they are presented
// (classical, priority-encoder, MUX-based, simple/complex gate, dual complex
// gate, single complex gate). The enum value is the index of that voter's
// output in tmr_voter_top's v_all array. The order is this design's choice.
package mv_pkg;

  localparam int unsigned NUM_VOTERS = 14;

  typedef enum logic [3:0] {
    AO_MV    = 4'd0,
    NAND_MV  = 4'd1,
    KP_MV    = 4'd2,
    BN_MV    = 4'd3,
    XNM_MV   = 4'd4,
    X2AO_MV  = 4'd5,
    XAO22_MV = 4'd6,
    OAO22_MV = 4'd7,
    AOA22_MV = 4'd8,
    OAAO_MV  = 4'd9,
    AOOA_MV  = 4'd10,
    AO222_MV = 4'd11,
    OA222_MV = 4'd12,
    MUX41_MV = 4'd13
  } voter_e;

endpackage
