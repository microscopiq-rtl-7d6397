// post_proc: Post Processing and Scale Compute Unit.
//
// What it does: turns the array's final partial sums (oActs) into quantized
// MX-INT outputs with a shared power-of-two output scale, as drawn in the
// paper's "Post Processing and Scale Compute Unit":
//   oAct_sf     = O_sf^l1 + uX - I_sf + iAct_sf   (the output scale)
//   shift value = O_sf^l1 + uX - 2*I_sf
// Outputs whose column received an outlier partial sum (in/out select = 1)
// are used as they are; inlier-only outputs are first shifted left by the
// shift value to bring them to the outlier-based scale. Every output is
// then scaled by a right shift of oAct_sf and saturated to MX-INT-8, or to
// MX-INT-4 (kept sign-extended in 8 bits) when q4 is set.
//
// How it works: the two scale sums are computed with adders and
// subtractors once per operation (they do not depend on the data); the
// per-output path is shift, select, shift, saturate, followed by one output
// register with a valid/ready handshake. The MXScale byte is split as the
// paper gives it: 7-bit O_sf^l1 and 1-bit uX in 2-bit MODE, 5-bit and 3-bit
// in 4-bit MODE. Treating O_sf^l1, I_sf and iAct_sf as two's-complement
// numbers and a negative shift as a shift the other way is this design's
// choice; so are the saturating rounding-free quantizer and the clamping of
// shift distances to 31. The paper also gives this unit the non-linear
// functions without describing them; they are not part of this block.
//
// Interface: one token per handshake. in_psum packs COLS partial sums as
// msq_core produces them; oact[p] is the output of weight position p
// (2 per column in 2-bit MODE; in 4-bit MODE position 2c holds column c and
// 2c+1 is 0). Latency one cycle.
module post_proc
  import msq_pkg::*;
#(
  parameter int unsigned COLS = 64,
  localparam int unsigned NP  = 2 * COLS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  mode_e                   mode,
  input  logic                    q4,
  input  logic [7:0]              mxscale,
  input  logic signed [7:0]       i_sf,
  input  logic signed [7:0]       iact_sf,
  input  logic [NP-1:0]           col_outlier,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [COLS*PSUM_W-1:0]  in_psum,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic signed [ACT_W-1:0] oact [NP],
  output logic signed [9:0]       oact_sf
);

  logic signed [9:0] o_l1, ux, sum1, shv, osf;

  always_comb begin
    if (mode == MODE_2B) begin
      o_l1 = 10'($signed(mxscale[7:1]));
      ux   = 10'($signed({1'b0, mxscale[0]}));
    end else begin
      o_l1 = 10'($signed(mxscale[7:3]));
      ux   = 10'($signed({1'b0, mxscale[2:0]}));
    end
    sum1 = o_l1 + ux;
    osf  = sum1 - 10'(i_sf) + 10'(iact_sf);
    shv  = sum1 - 10'(i_sf) - 10'(i_sf);
  end

  function automatic logic signed [PSUM_W-1:0] sh(logic signed [PSUM_W-1:0] v,
                                                  logic signed [9:0] n);
    // left shift by n (n >= 0) or arithmetic right shift by -n
    // (kept as separate statements: an unsigned operand in a ?: would turn
    // the >>> into a logical shift)
    logic signed [PSUM_W-1:0] r;
    if (n > 31)       r = '0;
    else if (n >= 0)  r = v <<< n;
    else if (n < -31) r = v >>> 31;
    else              r = v >>> (-n);
    return r;
  endfunction

  function automatic logic signed [ACT_W-1:0] sat(logic signed [PSUM_W-1:0] v, logic four);
    logic signed [PSUM_W-1:0] hi, lo;
    hi = four ? PSUM_W'(7) : PSUM_W'(127);
    lo = four ? -PSUM_W'(8) : -PSUM_W'(128);
    if (v > hi)      return ACT_W'(hi);
    else if (v < lo) return ACT_W'(lo);
    else             return ACT_W'(v);
  endfunction

  logic signed [ACT_W-1:0] q [NP];

  always_comb begin
    logic signed [PSUM_W-1:0] v, a;
    v = '0;
    a = '0;
    for (int p = 0; p < NP; p++) begin
      if (mode == MODE_2B)
        v = PSUM_W'($signed(in_psum[(p/2)*PSUM_W + (p%2)*LANE_W +: LANE_W]));
      else
        v = (p % 2 == 0) ? $signed(in_psum[(p/2)*PSUM_W +: PSUM_W]) : '0;
      a    = col_outlier[p] ? v : sh(v, shv);
      q[p] = sat(sh(a, -osf), q4);
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    out_valid <= 1'b0;
    else if (in_valid && in_ready) out_valid <= 1'b1;
    else if (out_ready)            out_valid <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      oact    <= q;
      oact_sf <= osf;
    end
  end

endmodule
