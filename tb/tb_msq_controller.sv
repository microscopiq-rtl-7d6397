// tb_msq_controller: self-checking test of the operation controller
// (ROWS = 4). For several operations with random bases and token counts it
// checks: the weight/IB read sequence (one row per cycle from the bases),
// the row load strobes one cycle after each read (ld_row 0..ROWS-1), the
// scale word read at ib_base + ROWS and its split into MXScale / I_sf /
// iAct_sf, exactly n_tok input tokens under random in_ready back-pressure,
// oAct write addresses 0..n_tok-1 for random post-processing results, and
// done / busy timing. The buffers are modelled with a one-cycle read.
module tb_msq_controller;
  localparam int ROWS = 4;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic [11:0] n_tok;
  logic [12:0] w_base, wb_raddr;
  logic [9:0] ib_base, ib_raddr;
  logic [10:0] oa_waddr;
  logic wb_re, ib_re, ld_valid, ld_clear, tok_clear, in_valid, in_ready, pp_valid, oa_we;
  logic [1:0] ld_row;
  logic [23:0] ib_scale_word;
  logic [7:0] mxscale, i_sf, iact_sf;
  int checks = 0, failures = 0;

  msq_controller #(.ROWS(ROWS)) dut (.*);

  always #5 clk = ~clk;

  // IB model: word at address a is {a[7:0]^8'h5a, a[7:0]+1, a[7:0]}, one-cycle read
  always_ff @(posedge clk)
    if (ib_re) ib_scale_word <= {ib_raddr[7:0] ^ 8'h5a, ib_raddr[7:0] + 8'd1, ib_raddr[7:0]};

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    start = 0; n_tok = 0; w_base = 0; ib_base = 0; in_ready = 0; pp_valid = 0;
    ib_scale_word = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int op = 0; op < 20; op++) begin
      int nt, wr, ld, sent, recv, pend, cyc;
      logic [7:0] sa;
      bit saw_done;
      nt = (op == 3) ? 1 : $urandom_range(1, 60);
      @(negedge clk);
      chk("idle", busy, 0);
      start = 1; n_tok = 12'(nt); w_base = 13'($urandom); ib_base = 10'($urandom_range(0, 1000));
      #1;
      chk("ld_clear with start", ld_clear, 1);
      @(negedge clk);
      start = 0;
      // row reads
      for (int r = 0; r < ROWS; r++) begin
        chk("busy", busy, 1);
        chk("wb_re", wb_re, 1);
        chk("wb addr", wb_raddr, 13'(w_base + r));
        chk("ib addr", ib_raddr, 10'(ib_base + r));
        if (r > 0) begin chk("ld_valid", ld_valid, 1); chk("ld_row", ld_row, r - 1); end
        @(negedge clk);
      end
      chk("last ld_valid", ld_valid, 1);
      chk("last ld_row", ld_row, ROWS - 1);
      chk("scale read", ib_re, 1);
      chk("scale addr", ib_raddr, 10'(ib_base + ROWS));
      sa = 8'(ib_base + ROWS);
      @(negedge clk);
      chk("tok_clear", tok_clear, 1);
      @(negedge clk);
      chk("mxscale", mxscale, sa);
      chk("i_sf", i_sf, 8'(sa + 1));
      chk("iact_sf", iact_sf, sa ^ 8'h5a);
      sent = 0; recv = 0; pend = 0; saw_done = 0; cyc = 0;
      while (!saw_done && cyc < 2000) begin
        in_ready = 1'($urandom);
        pp_valid = (pend > 0) && ($urandom_range(0, 2) == 0);
        #1;
        chk("in_valid while tokens left", in_valid, sent < nt);
        chk("oa_we", oa_we, pp_valid);
        if (pp_valid) begin chk("oa addr", oa_waddr, recv); recv++; pend--; end
        if (in_valid && in_ready) begin sent++; pend++; end
        if (done) saw_done = 1;
        @(negedge clk);
        pp_valid = 0;
        cyc++;
      end
      chk("tokens sent", sent, nt);
      chk("results written", recv, nt);
      chk("done seen", saw_done, 1);
      #1;
      chk("idle after done", busy, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
