// msq_controller: MicroScopiQ controller.
//
// What it does: runs one GEMM pass of the array. It loads the stationary
// weights and the per-row metadata into the PE rows, loads the scale
// factors, streams N_TOK tokens through the array and writes each token's
// post-processed outputs into the oAct buffer. ReCoN arbitration and the
// per-row handshakes that account for ReCoN's extra pipeline depth are in
// msq_core; this block sequences the buffers around it.
//
// How it works: a four-state machine.
//   LOAD : for r = 0..ROWS-1 reads weight-buffer word w_base+r and
//          instruction-buffer word ib_base+r; one cycle later (registered
//          RAM read) pulses ld_valid for row r.
//   SCALE: reads instruction-buffer word ib_base+ROWS, the scale word
//          {iAct_sf, I_sf, MXScale} in bits [23:0], and latches it.
//   RUN  : raises in_valid until n_tok tokens have entered row 0; every
//          output the post-processing unit delivers is written to oAct
//          buffer word n (n = 0, 1, ...).
//   DONE : one-cycle done pulse, then idle.
// The paper lists these duties (control of buffers, MODE, ReCoN
// configuration, post-processing, OCP-SRAM transfers) but not the
// sequencing; the state machine and the word layouts are this design's.
// Transfers between L2 and the buffers are done outside through the
// buffers' write ports.
//
// Interface: start (one pulse) with n_tok, w_base, ib_base; busy while
// running; done pulses at the end.
module msq_controller #(
  parameter int unsigned ROWS  = 64,
  parameter int unsigned TOK_W = 11,
  parameter int unsigned WB_AW = 13,
  parameter int unsigned IB_AW = 10,
  parameter int unsigned OA_AW = 11,
  localparam int unsigned RW   = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [TOK_W:0]   n_tok,
  input  logic [WB_AW-1:0] w_base,
  input  logic [IB_AW-1:0] ib_base,
  output logic             busy,
  output logic             done,
  // buffers
  output logic             wb_re,
  output logic [WB_AW-1:0] wb_raddr,
  output logic             ib_re,
  output logic [IB_AW-1:0] ib_raddr,
  input  logic [23:0]      ib_scale_word,
  // array
  output logic             ld_valid,
  output logic [RW-1:0]    ld_row,
  output logic             ld_clear,
  output logic             tok_clear,
  output logic             in_valid,
  input  logic             in_ready,
  // post-processing and oAct buffer
  input  logic             pp_valid,
  output logic             oa_we,
  output logic [OA_AW-1:0] oa_waddr,
  // scale registers
  output logic [7:0]       mxscale,
  output logic [7:0]       i_sf,
  output logic [7:0]       iact_sf
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_SCALE, S_SCALE_W, S_RUN, S_DONE} state_e;
  state_e st_q;

  logic [RW:0]    r_q;
  logic           pend_q;
  logic [RW-1:0]  pend_row_q;
  logic [TOK_W:0] sent_q, recv_q, ntok_q;
  logic [WB_AW-1:0] wbase_q;
  logic [IB_AW-1:0] ibase_q;

  always_comb begin
    wb_re     = (st_q == S_LOAD);
    ib_re     = (st_q == S_LOAD) || (st_q == S_SCALE);
    wb_raddr  = wbase_q + WB_AW'(r_q);
    ib_raddr  = ibase_q + IB_AW'(r_q);
    ld_valid  = pend_q;
    ld_row    = pend_row_q;
    ld_clear  = (st_q == S_IDLE) && start;
    tok_clear = (st_q == S_SCALE_W);
    in_valid  = (st_q == S_RUN) && (sent_q < ntok_q);
    oa_we     = pp_valid;
    oa_waddr  = OA_AW'(recv_q);
    busy      = (st_q != S_IDLE);
    done      = (st_q == S_DONE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= S_IDLE;
      r_q        <= '0;
      pend_q     <= 1'b0;
      pend_row_q <= '0;
      sent_q     <= '0;
      recv_q     <= '0;
      ntok_q     <= '0;
      wbase_q    <= '0;
      ibase_q    <= '0;
      mxscale    <= '0;
      i_sf       <= '0;
      iact_sf    <= '0;
    end else begin
      pend_q <= (st_q == S_LOAD);
      if (st_q == S_LOAD) pend_row_q <= r_q[RW-1:0];
      if (pp_valid) recv_q <= recv_q + 1'b1;
      if (in_valid && in_ready) sent_q <= sent_q + 1'b1;
      unique case (st_q)
        S_IDLE: if (start) begin
          st_q    <= S_LOAD;
          r_q     <= '0;
          ntok_q  <= n_tok;
          wbase_q <= w_base;
          ibase_q <= ib_base;
        end
        S_LOAD: begin
          r_q <= r_q + 1'b1;
          if (32'(r_q) == ROWS - 1) st_q <= S_SCALE;
        end
        S_SCALE: st_q <= S_SCALE_W;      // scale word read issued
        S_SCALE_W: begin
          mxscale <= ib_scale_word[7:0];
          i_sf    <= ib_scale_word[15:8];
          iact_sf <= ib_scale_word[23:16];
          sent_q  <= '0;
          recv_q  <= '0;
          st_q    <= S_RUN;
        end
        S_RUN: if (recv_q == ntok_q) st_q <= S_DONE;
        S_DONE: st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end

endmodule
