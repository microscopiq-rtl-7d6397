// msq_top: MicroScopiQ accelerator.
//
// What it does: computes one layer's GEMM, Y = X * W, where the weights W
// were quantized offline with MicroScopiQ: inliers as 2- or 4-bit MX-INT,
// outliers as MX-FP at twice the inlier width, split into an Upper and a
// Lower half, the Lower half stored in the slot of a pruned inlier of the
// same micro-block. Every weight slot therefore has the same width, the
// weight buffer stays aligned, and the PEs are plain INT PEs. The shared
// ReCoN network brings each outlier's halves back together, and the
// post-processing unit rescales and quantizes the outputs.
//
// How it works: msq_controller loads the ROWS x COLS stationary weights
// from the weight buffer and each row's metadata (per-micro-block outlier
// identifier bits and permutation lists) from the instruction buffer into
// msq_core, then streams tokens: row r of the array takes iAct (token, r)
// from its bank of iact_buffer. msq_core's bottom outputs go through
// post_proc into the oAct buffer, one word per token.
//
// Memory words (this design's layout; the paper gives the field sizes):
//  * weight buffer word r: COLS 4-bit slots, column c at [4c +: 4]; in
//    2-bit MODE a slot holds two weights, position 2c in [1:0], 2c+1 in
//    [3:2]. Outlier halves are sign-magnitude {s, m}.
//  * instruction buffer word r (r < ROWS): [NMB-1:0] the per-uB 1-bit
//    identifiers, then uB m's 24-bit permutation list at [NMB + 24m +: 24],
//    entry e at [6e +: 6] as {Upper_loc, Lower_loc}. Word ROWS: the scale
//    word {iAct_sf, I_sf, MXScale} in bits [23:0].
//  * oAct buffer word n: the NP 8-bit outputs of token n, position p at
//    [8p +: 8].
// The L2 SRAM, its OCP-SRAM interface and the HBM2 are outside this module;
// their side of the buffers is the *_wr ports below. The iAcc entering the
// top row is zero.
//
// Timing: start -> ROWS + 3 cycles of loading, then one token per cycle
// enters the array when no row waits for ReCoN; the first output appears
// ROWS + (rows with outliers) * (log2(2*COLS)+1) + 1 cycles after its
// token entered. done pulses after the last output is written.
module msq_top
  import msq_pkg::*;
#(
  parameter int unsigned ROWS     = 64,
  parameter int unsigned COLS     = 64,
  parameter int unsigned TOK_W    = 11,
  parameter int unsigned WB_DEPTH = 8192,
  parameter int unsigned IB_DEPTH = 1024,
  localparam int unsigned NP      = 2 * COLS,
  localparam int unsigned NMB     = NP / MB,
  localparam int unsigned IB_W    = NMB + NMB * MB_LOG * 2 * NPERM,
  localparam int unsigned WB_AW   = $clog2(WB_DEPTH),
  localparam int unsigned IB_AW   = $clog2(IB_DEPTH),
  localparam int unsigned OA_AW   = TOK_W,
  localparam int unsigned RW      = $clog2(ROWS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // operation
  input  logic                  start,
  input  mode_e                 mode,
  input  logic                  q4,
  input  logic [TOK_W:0]        n_tok,
  input  logic [WB_AW-1:0]      w_base,
  input  logic [IB_AW-1:0]      ib_base,
  output logic                  busy,
  output logic                  done,
  // buffer fill (L2 side)
  input  logic                  wb_wr,
  input  logic [WB_AW-1:0]      wb_waddr,
  input  logic [COLS*W_W-1:0]   wb_wdata,
  input  logic                  ib_wr,
  input  logic [IB_AW-1:0]      ib_waddr,
  input  logic [IB_W-1:0]       ib_wdata,
  input  logic                  ia_wr,
  input  logic [RW-1:0]         ia_wbank,
  input  logic [TOK_W-1:0]      ia_waddr,
  input  logic [ACT_W-1:0]      ia_wdata,
  // oAct buffer read (L2 side)
  input  logic                  oa_rd,
  input  logic [OA_AW-1:0]      oa_raddr,
  output logic [NP*ACT_W-1:0]   oa_rdata,
  output logic signed [9:0]     oact_sf,
  // statistics
  output logic                  st_issue,
  output logic                  st_contend,
  output logic                  st_hold,
  output logic                  st_conflict,
  output logic [ROWS-1:0]       row_has_outl   // rows that use ReCoN in this operation
);

  // ---------------- buffers ----------------
  logic                wb_re;
  logic [WB_AW-1:0]    wb_raddr;
  logic [COLS*W_W-1:0] wb_rdata;
  logic                ib_re;
  logic [IB_AW-1:0]    ib_raddr;
  logic [IB_W-1:0]     ib_rdata;
  logic                oa_we;
  logic [OA_AW-1:0]    oa_waddr;
  logic [NP*ACT_W-1:0] oa_wdata;

  msq_ram #(.W(COLS*W_W), .DEPTH(WB_DEPTH)) u_wbuf (
    .clk (clk), .we (wb_wr), .waddr (wb_waddr), .wdata (wb_wdata),
    .re (wb_re), .raddr (wb_raddr), .rdata (wb_rdata));

  msq_ram #(.W(IB_W), .DEPTH(IB_DEPTH)) u_ibuf (
    .clk (clk), .we (ib_wr), .waddr (ib_waddr), .wdata (ib_wdata),
    .re (ib_re), .raddr (ib_raddr), .rdata (ib_rdata));

  msq_ram #(.W(NP*ACT_W), .DEPTH(1 << OA_AW)) u_obuf (
    .clk (clk), .we (oa_we), .waddr (oa_waddr), .wdata (oa_wdata),
    .re (oa_rd), .raddr (oa_raddr), .rdata (oa_rdata));

  logic [TOK_W-1:0]        ia_raddr [ROWS];
  logic signed [ACT_W-1:0] ia_rdata [ROWS];

  iact_buffer #(.ROWS(ROWS), .DEPTH(1 << TOK_W)) u_iabuf (
    .clk (clk), .wr_en (ia_wr), .wr_bank (ia_wbank), .wr_addr (ia_waddr),
    .wr_data (ia_wdata), .rd_addr (ia_raddr), .rd_data (ia_rdata));

  // ---------------- controller ----------------
  logic          ld_valid, ld_clear, tok_clear, in_valid, in_ready;
  logic [RW-1:0] ld_row;
  logic          pp_valid;
  logic [7:0]    mxscale, i_sf, iact_sf;

  msq_controller #(.ROWS(ROWS), .TOK_W(TOK_W), .WB_AW(WB_AW), .IB_AW(IB_AW),
                   .OA_AW(OA_AW)) u_ctrl (
    .clk (clk), .rst_n (rst_n), .start (start), .n_tok (n_tok),
    .w_base (w_base), .ib_base (ib_base), .busy (busy), .done (done),
    .wb_re (wb_re), .wb_raddr (wb_raddr), .ib_re (ib_re), .ib_raddr (ib_raddr),
    .ib_scale_word (ib_rdata[23:0]),
    .ld_valid (ld_valid), .ld_row (ld_row), .ld_clear (ld_clear),
    .tok_clear (tok_clear), .in_valid (in_valid), .in_ready (in_ready),
    .pp_valid (pp_valid), .oa_we (oa_we), .oa_waddr (oa_waddr),
    .mxscale (mxscale), .i_sf (i_sf), .iact_sf (iact_sf));

  // ---------------- metadata decode ----------------
  logic       ld_mb_has [NMB];
  perm_list_t ld_perm   [NMB];

  always_comb begin
    for (int m = 0; m < NMB; m++) begin
      ld_mb_has[m] = ib_rdata[m];
      ld_perm[m]   = ib_rdata[NMB + m*MB_LOG*2*NPERM +: MB_LOG*2*NPERM];
    end
  end

  // ---------------- array ----------------
  logic                   core_out_valid, core_out_ready;
  logic [COLS*PSUM_W-1:0] core_out_psum;
  logic [NP-1:0]          col_outlier;
  logic                   row_outl [ROWS];

  msq_core #(.ROWS(ROWS), .COLS(COLS), .TOK_W(TOK_W)) u_core (
    .clk (clk), .rst_n (rst_n), .mode (mode),
    .ld_valid (ld_valid), .ld_row (ld_row), .ld_w (wb_rdata),
    .ld_mb_has (ld_mb_has), .ld_perm (ld_perm), .ld_clear (ld_clear),
    .tok_clear (tok_clear), .in_valid (in_valid), .in_ready (in_ready),
    .in_psum ('0), .iact_addr (ia_raddr), .iact_data (ia_rdata),
    .out_valid (core_out_valid), .out_ready (core_out_ready),
    .out_psum (core_out_psum), .col_outlier (col_outlier), .row_outl (row_outl),
    .st_issue (st_issue), .st_contend (st_contend), .st_hold (st_hold),
    .st_conflict (st_conflict));

  // ---------------- post-processing ----------------
  logic signed [ACT_W-1:0] oact [NP];

  post_proc #(.COLS(COLS)) u_pp (
    .clk (clk), .rst_n (rst_n), .mode (mode), .q4 (q4),
    .mxscale (mxscale), .i_sf (i_sf), .iact_sf (iact_sf),
    .col_outlier (col_outlier),
    .in_valid (core_out_valid), .in_ready (core_out_ready),
    .in_psum (core_out_psum),
    .out_valid (pp_valid), .out_ready (1'b1),
    .oact (oact), .oact_sf (oact_sf));

  always_comb
    for (int r = 0; r < ROWS; r++) row_has_outl[r] = row_outl[r];

  always_comb
    for (int p = 0; p < NP; p++) oa_wdata[p*ACT_W +: ACT_W] = oact[p];

endmodule
