// msq_core: the MicroScopiQ PE array with its shared ReCoN.
//
// What it does: ROWS pe_rows form a weight-stationary array. Partial sums
// flow down the rows; iActs enter every row from its own iAct-buffer bank.
// A row whose micro-blocks hold no outliers hands its partial sums straight
// to the next row. A row with outliers sends its whole result through the
// shared ReCoN, which redistributes and merges the outlier halves, and the
// corrected partial sums continue into the next row (or leave the array if
// it was the last row). This is the flow of the paper's steps 1-5.
//
// How it works:
//  * Loading (ld_valid): row ld_row gets its COLS weights, its per-uB
//    identifier bits and permutation lists. A recon_cfg_gen turns the lists
//    into the row's Outlier_Present bits; the row is marked "has outliers"
//    if any position is an outlier half. Positions holding an Upper half in
//    any row are collected in col_outlier for post-processing.
//  * Streaming: every row is one valid/ready pipeline stage. Row r consumes
//    tokens in order and reads iAct (token k, row r) through iact_addr[r].
//  * ReCoN access: rows with outliers request ReCoN; recon_arbiter grants
//    one per cycle (round robin). A second recon_cfg_gen computes the switch
//    configuration from the granted row's permutation lists, so ReCoN is
//    reconfigured every cycle for whichever row it serves.
//  * Landing queues: ReCoN results tagged with row r are written into the
//    queue in front of row r+1 (queue ROWS feeds the array output). Credits
//    (queue occupancy plus results still inside ReCoN) keep ReCoN from
//    being granted for a destination without room, so ReCoN never stalls.
//    The queues are this design's means to let ReCoN run without
//    back-pressure; the paper only says the controller directs row r+1 to
//    take its input from ReCoN.
//
// Two recon_cfg_gen instances are used, each for part of its outputs: the
// load-time one for Outlier_Present, Upper positions and the conflict flag
// (its switch configuration is not needed), the grant-time one for the
// switch configuration only. Lint reports the unused outputs.
//
// Interface: in_* is the top of the array (iAcc of row 0). out_* is the
// bottom: COLS partial sums, column c at [c*PSUM_W +: PSUM_W] (two LANE_W
// partial sums in 2-bit MODE, lane 1 in the upper half). Statistics pulses:
// st_issue (a row entered ReCoN), st_contend (more than one row requested),
// st_hold (a requesting row was not granted), st_conflict (the lists of a
// row loaded this cycle do not route). Latency: one cycle per row plus
// log2(2*COLS)+1 cycles per row with outliers.
module msq_core
  import msq_pkg::*;
#(
  parameter int unsigned ROWS  = 64,
  parameter int unsigned COLS  = 64,
  parameter int unsigned TOK_W = 11,
  localparam int unsigned NP   = 2 * COLS,
  localparam int unsigned NMB  = NP / MB,
  localparam int unsigned NST  = $clog2(NP) + 1,
  localparam int unsigned RW   = $clog2(ROWS),
  localparam int unsigned QD   = NST + 1,
  localparam int unsigned BUSW = COLS * PSUM_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  mode_e                   mode,
  // loading of one row's weights and metadata
  input  logic                    ld_valid,
  input  logic [RW-1:0]           ld_row,
  input  logic [COLS*W_W-1:0]     ld_w,
  input  logic                    ld_mb_has [NMB],
  input  perm_list_t              ld_perm   [NMB],
  input  logic                    ld_clear,     // clear col_outlier
  // token stream
  input  logic                    tok_clear,    // restart token counters
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [BUSW-1:0]         in_psum,
  output logic [TOK_W-1:0]        iact_addr [ROWS],
  input  logic signed [ACT_W-1:0] iact_data [ROWS],
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [BUSW-1:0]         out_psum,
  output logic [NP-1:0]           col_outlier,
  output logic                    row_outl [ROWS],
  // statistics
  output logic                    st_issue,
  output logic                    st_contend,
  output logic                    st_hold,
  output logic                    st_conflict
);

  // ---------------- per-row configuration ----------------
  logic       has_out  [ROWS];
  logic       mb_has_q [ROWS][NMB];
  perm_list_t perm_q   [ROWS][NMB];
  logic [NP-1:0] opres_q [ROWS];

  sw_cfg_e       ld_cfg [NST][NP];
  logic [NP-1:0] ld_ohalf, ld_oupper;
  logic          ld_conf;

  recon_cfg_gen #(.NP(NP)) u_ld_gen (
    .mode (mode), .has_out (ld_mb_has), .perm (ld_perm),
    .cfg (ld_cfg), .ohalf (ld_ohalf), .oupper (ld_oupper), .conflict (ld_conf)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) begin
        has_out[r] <= 1'b0;
        opres_q[r] <= '0;
      end
      col_outlier <= '0;
    end else begin
      if (ld_clear) col_outlier <= '0;
      if (ld_valid) begin
        has_out[ld_row]  <= (ld_ohalf != '0);
        opres_q[ld_row]  <= ld_ohalf;
        mb_has_q[ld_row] <= ld_mb_has;
        perm_q[ld_row]   <= ld_perm;
        col_outlier      <= (ld_clear ? '0 : col_outlier) | ld_oupper;
      end
    end
  end

  assign st_conflict = ld_valid && ld_conf;
  assign row_outl    = has_out;

  // ---------------- rows ----------------
  logic                    r_in_valid  [ROWS];
  logic                    r_in_ready  [ROWS];
  logic [BUSW-1:0]         r_in_psum   [ROWS];
  logic                    r_out_valid [ROWS];
  logic                    r_out_ready [ROWS];
  logic signed [ACT_W-1:0] r_out_iact  [ROWS];
  recon_pkt_t              r_out_pkt   [ROWS][NP];
  logic [BUSW-1:0]         r_out_psum  [ROWS];
  logic [TOK_W-1:0]        tok_q       [ROWS];

  // landing queues, index d = destination row (ROWS = array output)
  logic            q_push  [ROWS+1];
  logic            q_pop   [ROWS+1];
  logic [BUSW-1:0] q_dout  [ROWS+1];
  logic [$clog2(QD+1)-1:0] q_cnt [ROWS+1];
  logic [$clog2(QD+1)-1:0] infl_q [ROWS+1];

  // ReCoN side
  logic [ROWS-1:0] req, room, gnt;
  logic            gnt_any;
  logic [RW-1:0]   gnt_idx;
  sw_cfg_e         g_cfg [NST][NP];
  logic [NP-1:0]   g_ohalf, g_oupper;
  logic            g_conf;
  recon_pkt_t      rc_in  [NP];
  logic            rc_out_valid;
  logic [RW-1:0]   rc_out_tag;
  recon_pkt_t      rc_out [NP];
  logic [BUSW-1:0] rc_out_psum;

  function automatic logic [BUSW-1:0] pack(mode_e md, recon_pkt_t p [NP]);
    logic [BUSW-1:0] b;
    for (int c = 0; c < COLS; c++) begin
      if (md == MODE_2B)
        b[c*PSUM_W +: PSUM_W] = {p[2*c+1].acc[LANE_W-1:0], p[2*c].acc[LANE_W-1:0]};
      else
        b[c*PSUM_W +: PSUM_W] = p[2*c].acc;
    end
    return b;
  endfunction

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    pe_row #(.COLS(COLS)) u_row (
      .clk       (clk),
      .rst_n     (rst_n),
      .w_load    (ld_valid && (ld_row == RW'(r))),
      .w_row     (ld_w),
      .opresent  (opres_q[r]),
      .mode      (mode),
      .in_valid  (r_in_valid[r]),
      .in_ready  (r_in_ready[r]),
      .iact      (iact_data[r]),
      .in_psum   (r_in_psum[r]),
      .out_valid (r_out_valid[r]),
      .out_ready (r_out_ready[r]),
      .out_iact  (r_out_iact[r]),
      .out_pkt   (r_out_pkt[r])
    );
    assign r_out_psum[r] = pack(mode, r_out_pkt[r]);
    assign iact_addr[r]  = tok_q[r];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_link
    // input side of row r
    if (r == 0) begin : g_top
      assign r_in_valid[r] = in_valid;
      assign r_in_psum[r]  = in_psum;
    end else begin : g_mid
      assign r_in_valid[r] = has_out[r-1] ? (q_cnt[r] != 0) : r_out_valid[r-1];
      assign r_in_psum[r]  = has_out[r-1] ? q_dout[r] : r_out_psum[r-1];
    end
    // output side of row r
    if (r < ROWS - 1) begin : g_nlast
      assign r_out_ready[r] = has_out[r] ? gnt[r] : r_in_ready[r+1];
    end else begin : g_last
      assign r_out_ready[r] = has_out[r] ? gnt[r] : out_ready;
    end
    assign req[r]  = has_out[r] && r_out_valid[r];
    assign room[r] = (32'(q_cnt[r+1]) + 32'(infl_q[r+1])) < QD;
  end

  always_comb begin
    in_ready = r_in_ready[0];
    for (int d = 0; d <= ROWS; d++) begin
      q_push[d] = rc_out_valid && (d > 0) && (32'(rc_out_tag) == d - 1);
      q_pop[d]  = 1'b0;
    end
    for (int d = 1; d < ROWS; d++)
      q_pop[d] = has_out[d-1] && (q_cnt[d] != 0) && r_in_ready[d];
    // array output
    if (has_out[ROWS-1]) begin
      out_valid     = (q_cnt[ROWS] != 0);
      out_psum      = q_dout[ROWS];
      q_pop[ROWS]   = out_valid && out_ready;
    end else begin
      out_valid     = r_out_valid[ROWS-1];
      out_psum      = r_out_psum[ROWS-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) tok_q[r] <= '0;
      for (int d = 0; d <= ROWS; d++) infl_q[d] <= '0;
    end else begin
      for (int r = 0; r < ROWS; r++) begin
        if (tok_clear)                            tok_q[r] <= '0;
        else if (r_in_valid[r] && r_in_ready[r])  tok_q[r] <= tok_q[r] + 1'b1;
      end
      for (int d = 1; d <= ROWS; d++)
        infl_q[d] <= infl_q[d] + $bits(infl_q[d])'(gnt_any && (32'(gnt_idx) == d - 1))
                               - $bits(infl_q[d])'(q_push[d]);
    end
  end

  for (genvar d = 0; d <= ROWS; d++) begin : g_q
    if (d == 0) begin : g_none
      assign q_dout[d] = '0;
      assign q_cnt[d]  = '0;
    end else begin : g_fifo
      msq_fifo #(.W(BUSW), .DEPTH(QD)) u_q (
        .clk (clk), .rst_n (rst_n),
        .push (q_push[d]), .din (rc_out_psum),
        .pop (q_pop[d]), .dout (q_dout[d]), .count (q_cnt[d])
      );
    end
  end

  // ---------------- shared ReCoN ----------------
  recon_arbiter #(.N(ROWS)) u_arb (
    .clk (clk), .rst_n (rst_n), .req (req), .room (room),
    .gnt (gnt), .gnt_any (gnt_any), .gnt_idx (gnt_idx), .contend (st_contend)
  );

  recon_cfg_gen #(.NP(NP)) u_gnt_gen (
    .mode (mode), .has_out (mb_has_q[gnt_idx]), .perm (perm_q[gnt_idx]),
    .cfg (g_cfg), .ohalf (g_ohalf), .oupper (g_oupper), .conflict (g_conf)
  );

  assign rc_in = r_out_pkt[gnt_idx];

  recon #(.NP(NP), .TAG_W(RW)) u_recon (
    .clk (clk), .rst_n (rst_n),
    .in_valid (gnt_any), .in_tag (gnt_idx), .in_mode (mode),
    .in_iact (r_out_iact[gnt_idx]), .in_cfg (g_cfg), .in_pkt (rc_in),
    .out_valid (rc_out_valid), .out_tag (rc_out_tag), .out_pkt (rc_out)
  );

  assign rc_out_psum = pack(mode, rc_out);
  assign st_issue    = gnt_any;
  assign st_hold     = |(req & ~gnt);

endmodule
