// recon_switch: one {2-input, 2-output} switch of the ReCoN butterfly.
//
// What it does: for one column at one ReCoN stage it takes the packet that
// comes straight down its own column (s_in) and the packet that crosses over
// from its butterfly partner column (x_in), and produces the packet that goes
// straight on (s_out) and the packet that crosses to the partner column of
// the next stage (x_out). The paper names three operations; this design
// splits the paper's Swap into the two roles it plays in the paper's
// walk-through example, so the 3-bit configuration (encoding assumed) is:
//   PASS : s_out = s_in.                       (inliers, Upper halves)
//   SWAP : x_out = s_in, s_out = iAcc of s_in. A Lower half leaves its column;
//          the pruned column keeps only its iAcc, as the paper describes.
//   FWD  : s_out = s_in, x_out = x_in.         A Lower half that arrived from
//          the partner travels on across (the second swap in the example).
//   MERGE: s_in is the Upper half, x_in the Lower half of one outlier. The
//          output is iAcc(Upper) + (U >> 1) + (L >> 2) + iAct, the paper's
//          merge with the hidden bit. U and L are the mantissa products
//          iAct*m of the halves with their sign applied.
// Sign handling (this design's choice, the paper does not give it): each
// half is stored sign-magnitude {s, m}, the duplicated sign in the MSB. The
// PE multiplies it as a two's-complement INT, so Res = iAct*(m - s*2^(bb-1));
// the switch restores iAct*m by adding back s*iAct*2^(bb-1), applies the
// sign, and takes the hidden bit as -iAct for a negative outlier.
// In 4-bit MODE (bb = 4) each half has a 3-bit magnitude and the shifts are
// 3 and 6, the same rule as bb = 2 gives 1 and 2 (the paper only says the
// merge "internally handles multi-precision MODE").
//
// Interface: purely combinational; ReCoN registers the outputs of each stage.
module recon_switch
  import msq_pkg::*;
(
  input  sw_cfg_e                  cfg,
  input  mode_e                    mode,
  input  logic signed [ACT_W-1:0]  iact,
  input  recon_pkt_t               s_in,
  input  recon_pkt_t               x_in,
  output recon_pkt_t               s_out,
  output recon_pkt_t               x_out
);

  logic signed [PSUM_W-1:0] iact_w, mag_u, mag_l, con_u, con_l, hid;
  int unsigned sh1, sh2;

  always_comb begin
    iact_w = PSUM_W'(iact);
    sh1    = (mode == MODE_2B) ? 1 : 3;
    sh2    = 2 * sh1;
    mag_u  = s_in.res + (s_in.sgn ? (iact_w <<< sh1) : '0);
    mag_l  = x_in.res + (x_in.sgn ? (iact_w <<< sh1) : '0);
    con_u  = s_in.sgn ? -mag_u : mag_u;
    con_l  = x_in.sgn ? -mag_l : mag_l;
    hid    = s_in.sgn ? -iact_w : iact_w;
  end

  always_comb begin
    s_out = s_in;
    x_out = '0;
    unique case (cfg)
      SW_PASS: ;
      SW_SWAP: begin
        x_out     = s_in;
        s_out     = '0;
        s_out.acc = s_in.acc;
      end
      SW_FWD: begin
        x_out = x_in;
      end
      SW_MERGE: begin
        s_out     = '0;
        s_out.acc = s_in.acc + (con_u >>> sh1) + (con_l >>> sh2) + hid;
      end
      default: ;
    endcase
  end

endmodule
