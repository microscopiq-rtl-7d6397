// tb_msq_core: self-checking test of the PE array with its shared ReCoN
// (ROWS = 4, COLS = 8, so NP = 16 positions and 2 uBs per row in 2-bit MODE).
// For several operations in alternating MODEs a random weight matrix with
// routable outlier pairs (msq_op) is loaded row by row through ld_*, then a
// stream of tokens with random iActs (served from a model of the banked iAct
// buffer through iact_addr / iact_data) and random top partial sums is
// pushed in with random input gaps and random output back-pressure. Every
// output column is compared with the reference sum over rows of inlier
// products and merged outliers. It also checks col_outlier, that no list
// conflicts, and counts ReCoN issues, contention (several rows requesting),
// holds (a requesting row not granted), input stalls and output stalls;
// the test fails if any of them never happened.
module tb_msq_core;
  import msq_pkg::*;
  import msq_ref_pkg::*;
  localparam int ROWS = 4, COLS = 8, NP = 16, NMB = 2, NT = 120;

  logic clk = 0, rst_n = 0;
  mode_e mode;
  logic ld_valid, ld_clear, tok_clear;
  logic [1:0] ld_row;
  logic [COLS*4-1:0] ld_w;
  logic ld_mb_has [NMB];
  perm_list_t ld_perm [NMB];
  logic in_valid, in_ready, out_valid, out_ready;
  logic [COLS*32-1:0] in_psum, out_psum;
  logic [10:0] iact_addr [ROWS];
  logic signed [7:0] iact_data [ROWS];
  logic [NP-1:0] col_outlier;
  logic row_outl [ROWS];
  logic st_issue, st_contend, st_hold, st_conflict;
  int checks = 0, failures = 0;
  int n_issue = 0, n_contend = 0, n_hold = 0, n_conflict = 0, n_in_stall = 0, n_out_stall = 0;

  msq_core #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  int iact_mem [ROWS][NT];
  always_comb
    for (int r = 0; r < ROWS; r++)
      iact_data[r] = (iact_addr[r] < NT) ? 8'(iact_mem[r][iact_addr[r]]) : 8'd0;

  always @(posedge clk) if (rst_n) begin
    n_issue    += st_issue;
    n_contend  += st_contend;
    n_hold     += st_hold;
    n_conflict += st_conflict;
    n_in_stall  += (in_valid && !in_ready);
    n_out_stall += (out_valid && !out_ready);
  end

  initial begin
    #50000000;
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
    msq_op op;
    logic [COLS*32-1:0] top [NT];
    mode = MODE_2B; ld_valid = 0; ld_clear = 0; tok_clear = 0; ld_row = 0; ld_w = '0;
    foreach (ld_mb_has[m]) begin ld_mb_has[m] = 0; ld_perm[m] = '0; end
    in_valid = 0; out_ready = 0; in_psum = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int opn = 0; opn < 6; opn++) begin
      bit m2;
      int sent, got, cyc;
      m2 = (opn % 2 == 0);
      op = new(ROWS, COLS, m2);
      op.randomize_op(opn == 4 ? 0 : 70);
      @(negedge clk);
      mode = m2 ? MODE_2B : MODE_4B;
      ld_clear = 1;
      @(negedge clk);
      ld_clear = 0;
      for (int r = 0; r < ROWS; r++) begin
        logic [4095:0] w;
        w = op.wword(r);
        ld_valid = 1; ld_row = 2'(r); ld_w = w[COLS*4-1:0];
        for (int m = 0; m < NMB; m++) begin
          ld_mb_has[m] = (m < op.npos / 8) ? op.mb_has(r, m) : 1'b0;
          ld_perm[m]   = (m < op.npos / 8) ? op.perm(r, m) : '0;
        end
        @(negedge clk);
      end
      ld_valid = 0;
      tok_clear = 1;
      @(negedge clk);
      tok_clear = 0;
      for (int p = 0; p < op.npos; p++)
        chk("col_outlier", col_outlier[m2 ? p : 2 * p], op.is_upper_anywhere(p));
      for (int t = 0; t < NT; t++) begin
        for (int r = 0; r < ROWS; r++) iact_mem[r][t] = int'($signed(8'($urandom)));
        for (int c = 0; c < COLS; c++) top[t][32*c +: 32] = $urandom;
      end
      sent = 0; got = 0; cyc = 0;
      while (got < NT && cyc < 20000) begin
        in_valid  = (sent < NT) && ($urandom_range(0, 4) != 0);
        in_psum   = top[sent < NT ? sent : 0];
        out_ready = ($urandom_range(0, 3) != 0);
        #1;
        if (out_valid && out_ready) begin
          int ia [];
          ia = new[ROWS];
          for (int r = 0; r < ROWS; r++) ia[r] = iact_mem[r][got];
          for (int p = 0; p < op.npos; p++) begin
            longint e, g;
            if (m2) begin
              e = longint'($signed(16'(int'(top[got][16*p +: 16]) + op.expect_pos(p, ia))));
              g = longint'($signed(out_psum[16*p +: 16]));
            end else begin
              e = longint'($signed(32'(int'(top[got][32*p +: 32]) + op.expect_pos(p, ia))));
              g = longint'($signed(out_psum[32*p +: 32]));
            end
            chk($sformatf("op%0d tok%0d pos%0d", opn, got, p), g, e);
          end
          got++;
        end
        if (in_valid && in_ready) sent++;
        @(negedge clk);
        cyc++;
      end
      in_valid = 0;
      chk("all tokens out", got, NT);
    end
    chk("no list conflicts", n_conflict, 0);
    chk("ReCoN issues happened", n_issue > 0, 1);
    chk("contention happened", n_contend > 0, 1);
    chk("holds happened", n_hold > 0, 1);
    chk("input stalls happened", n_in_stall > 0, 1);
    chk("output stalls happened", n_out_stall > 0, 1);
    $display("issues %0d contention %0d holds %0d in-stalls %0d out-stalls %0d",
             n_issue, n_contend, n_hold, n_in_stall, n_out_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
