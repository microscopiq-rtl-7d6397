// msq_top_tb_body.svh: the end-to-end test shared by tb_msq_top (reduced
// array) and tb_msq_top_full (default size). The including module defines
// ROWS, COLS, NOPS (operations), NT (tokens per operation), PCT (percent of
// uBs with outliers) and instantiates msq_top as `dut`.
//
// Each operation: the buffers are filled through the L2-side write ports
// (weight rows, IB words with uB identifiers and permutation lists, the scale
// word after the rows, iActs per bank), `start` is pulsed with the MODE and
// output precision, the test waits for `done`, then reads every oAct word
// back and compares each output with the reference: sum over rows of inlier
// products and merged outliers (msq_op), then the post-processing reference
// (pp_ref). Operations alternate MODE, output precision and buffer bases.
// Mechanisms counted (the test fails if one never happened): ReCoN issues
// (outlier merges), ReCoN contention, rows held back by the arbiter, MODE
// switches between operations, outputs of outlier columns, inlier outputs
// shifted by a non-zero shift value, saturated outputs, and MX-INT-4 outputs.

  localparam int NP = 2 * COLS, NMB = NP / 8, IB_W = NMB + NMB * 24;

  logic clk = 0, rst_n = 0;
  logic start, q4, busy, done;
  mode_e mode;
  logic [11:0] n_tok;
  logic [$clog2(WB_DEPTH)-1:0] w_base, wb_waddr;
  logic [$clog2(IB_DEPTH)-1:0] ib_base, ib_waddr;
  logic wb_wr, ib_wr, ia_wr, oa_rd;
  logic [COLS*4-1:0] wb_wdata;
  logic [IB_W-1:0] ib_wdata;
  logic [$clog2(ROWS)-1:0] ia_wbank;
  logic [10:0] ia_waddr, oa_raddr;
  logic [7:0] ia_wdata;
  logic [NP*8-1:0] oa_rdata;
  logic signed [9:0] oact_sf;
  logic st_issue, st_contend, st_hold, st_conflict;
  logic [ROWS-1:0] row_has_outl;

  int checks = 0, failures = 0;
  int n_issue = 0, n_contend = 0, n_hold = 0, n_conflict = 0;
  int n_mode_sw = 0, n_outl_out = 0, n_shift_out = 0, n_sat = 0, n_q4 = 0;

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    n_issue    += st_issue;
    n_contend  += st_contend;
    n_hold     += st_hold;
    n_conflict += st_conflict;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    msq_op op;
    int iact_v [][];
    mode_e last_mode;
    start = 0; q4 = 0; mode = MODE_2B; n_tok = 0; w_base = 0; ib_base = 0;
    wb_wr = 0; ib_wr = 0; ia_wr = 0; oa_rd = 0; wb_waddr = 0; ib_waddr = 0;
    wb_wdata = '0; ib_wdata = '0; ia_wbank = 0; ia_waddr = 0; ia_wdata = 0; oa_raddr = 0;
    last_mode = MODE_2B;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int opn = 0; opn < NOPS; opn++) begin
      bit m2;
      int mxs, isf, iasf, shv, cyc;
      m2 = (opn % 2 == 0);
      op = new(ROWS, COLS, m2);
      op.randomize_op(PCT);
      // scales: keep the shift values small so outputs are not all saturated
      isf  = $urandom_range(0, 2);
      iasf = $urandom_range(0, 3) - 1;
      if (m2) mxs = ($urandom_range(0, 3) << 1) | $urandom_range(0, 1);
      else    mxs = ($urandom_range(0, 3) << 3) | $urandom_range(0, 3);
      shv = m2 ? ((mxs >> 1) + (mxs & 1) - 2 * isf) : ((mxs >> 3) + (mxs & 7) - 2 * isf);
      // fill the buffers
      @(negedge clk);
      w_base  = $clog2(WB_DEPTH)'($urandom_range(0, WB_DEPTH - ROWS - 1));
      ib_base = $clog2(IB_DEPTH)'($urandom_range(0, IB_DEPTH - ROWS - 2));
      for (int r = 0; r < ROWS; r++) begin
        logic [4095:0] w;
        w = op.wword(r);
        wb_wr = 1; wb_waddr = w_base + r; wb_wdata = w[COLS*4-1:0];
        ib_wr = 1; ib_waddr = ib_base + r; ib_wdata = '0;
        for (int m = 0; m < op.npos / 8; m++) begin
          ib_wdata[m] = op.mb_has(r, m);
          ib_wdata[NMB + 24*m +: 24] = op.perm(r, m);
        end
        @(negedge clk);
      end
      wb_wr = 0;
      ib_wr = 1; ib_waddr = ib_base + ROWS; ib_wdata = '0;
      ib_wdata[23:0] = {8'(iasf), 8'(isf), 8'(mxs)};
      @(negedge clk);
      ib_wr = 0;
      iact_v = new[NT];
      for (int t = 0; t < NT; t++) begin
        iact_v[t] = new[ROWS];
        for (int r = 0; r < ROWS; r++) begin
          iact_v[t][r] = int'($signed(8'($urandom)));
          ia_wr = 1; ia_wbank = $clog2(ROWS)'(r); ia_waddr = 11'(t); ia_wdata = 8'(iact_v[t][r]);
          @(negedge clk);
        end
      end
      ia_wr = 0;
      // run
      mode = m2 ? MODE_2B : MODE_4B;
      if (opn > 0 && mode != last_mode) n_mode_sw++;
      last_mode = mode;
      q4 = (opn % 4 >= 2);
      n_tok = 12'(NT);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!done && cyc < 200000) begin @(negedge clk); cyc++; end
      chk("operation finished", done, 1);
      for (int r = 0; r < ROWS; r++) chk("row uses ReCoN", row_has_outl[r], op.up[r].size() > 0);
      chk("output scale", oact_sf, (m2 ? ((mxs >> 1) + (mxs & 1)) : ((mxs >> 3) + (mxs & 7))) - isf + iasf);
      @(negedge clk);
      // read back and compare
      for (int t = 0; t < NT; t++) begin
        oa_rd = 1; oa_raddr = 11'(t);
        @(negedge clk);
        oa_rd = 0;
        for (int p = 0; p < op.npos; p++) begin
          int v, e, idx;
          bit outl;
          v = op.expect_pos(p, iact_v[t]);
          if (m2) v = int'($signed(16'(v)));
          outl = op.is_upper_anywhere(p);
          idx = m2 ? p : 2 * p;
          e = pp_ref(v, outl, m2, q4, mxs, isf, iasf);
          chk($sformatf("op%0d tok%0d pos%0d", opn, t, p), longint'($signed(oa_rdata[8*idx +: 8])), e);
          if (outl) n_outl_out++;
          else if (shv != 0) n_shift_out++;
          if (e == (q4 ? 7 : 127) || e == (q4 ? -8 : -128)) n_sat++;
          if (q4) n_q4++;
        end
      end
    end
    chk("no list conflicts", n_conflict, 0);
    chk("outlier merges (ReCoN issues) happened", n_issue > 0, 1);
    chk("ReCoN contention happened", n_contend > 0, 1);
    chk("arbiter holds happened", n_hold > 0, 1);
    chk("MODE switches happened", n_mode_sw > 0, 1);
    chk("outlier-column outputs happened", n_outl_out > 0, 1);
    chk("shifted inlier outputs happened", n_shift_out > 0, 1);
    chk("saturated outputs happened", n_sat > 0, 1);
    chk("MX-INT-4 outputs happened", n_q4 > 0, 1);
    $display("issues %0d contention %0d holds %0d mode-switches %0d outlier-outputs %0d shifted %0d saturated %0d int4 %0d",
             n_issue, n_contend, n_hold, n_mode_sw, n_outl_out, n_shift_out, n_sat, n_q4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
