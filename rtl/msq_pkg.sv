// msq_pkg: types and constants shared by the MicroScopiQ accelerator.
//
// The datapath moves two kinds of partial sums: plain inlier partial sums,
// which a PE has already accumulated, and outlier halves, which a PE cannot
// accumulate itself and forwards as the pair {Res, iAcc} (plus the outlier's
// sign) so that ReCoN can merge the Upper and Lower halves. Both travel in
// one packet type, recon_pkt_t: for an accumulated value res is zero and acc
// holds the partial sum.
//
// Widths: iActs are 8-bit INTs (the iAct buffer stores 8-bit values, lower
// precisions are sign-extended, as in the paper). A PE lane accumulates in
// LANE_W bits; in 4-bit MODE the two lane adders are chained to PSUM_W bits.
// LANE_W and PSUM_W are this design's choice; the paper does not state them.
package msq_pkg;

  localparam int unsigned ACT_W  = 8;   // iAct / oAct width (paper: 8-bit INT)
  localparam int unsigned W_W    = 4;   // weight register width (paper: 4-bit)
  localparam int unsigned LANE_W = 16;  // one lane adder (assumed)
  localparam int unsigned PSUM_W = 2 * LANE_W;  // chained adders, 4-bit MODE
  localparam int unsigned MB     = 8;   // micro-block size B_mu (paper: 8)
  localparam int unsigned MB_LOG = 3;
  localparam int unsigned NPERM  = MB / 2;  // permutation-list entries per uB

  // MODE signal: one 4-bit weight or two packed 2-bit weights per PE.
  typedef enum logic {MODE_4B = 1'b0, MODE_2B = 1'b1} mode_e;

  // ReCoN switch configuration (3 bits, as in the paper; encoding assumed).
  //   SW_PASS : straight output = straight input
  //   SW_SWAP : the straight input (an outlier Lower half) leaves through the
  //             cross output; its column keeps only the iAcc
  //   SW_FWD  : straight input passes, the cross input (a travelling Lower
  //             half) is sent on through the cross output
  //   SW_MERGE: straight input (Upper) and cross input (Lower) are merged
  typedef enum logic [2:0] {
    SW_PASS  = 3'd0,
    SW_SWAP  = 3'd1,
    SW_FWD   = 3'd2,
    SW_MERGE = 3'd3
  } sw_cfg_e;

  // One partial-sum packet at one ReCoN position.
  typedef struct packed {
    logic                     sgn;  // sign bit of the outlier half's weight
    logic signed [PSUM_W-1:0] res;  // product still to be merged (0 if none)
    logic signed [PSUM_W-1:0] acc;  // accumulated partial sum / iAcc
  } recon_pkt_t;

  // One permutation-list entry: {Upper_loc, Lower_loc}, 6 bits for B_mu = 8.
  // An entry whose two locations are equal is unused (this design's choice;
  // the paper draws unused entries as "-").
  typedef struct packed {
    logic [MB_LOG-1:0] upper;
    logic [MB_LOG-1:0] lower;
  } perm_ent_t;

  // Permutation list of one micro-block: B_mu/2 entries = 24 bits.
  typedef perm_ent_t [NPERM-1:0] perm_list_t;

endpackage
