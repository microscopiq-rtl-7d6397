// tb_recon_cfg_gen: self-checking test of the ReCoN configuration generator.
// Part 1 (NP = 8, one uB): the paper's walk-through list {Upper 3, Lower 0}
//   must give SWAP at column 0 stage 0, FWD at column 1 stage 1, MERGE at
//   column 3 stage 2 and PASS everywhere else; Outlier_Present / Upper marks
//   must be set; a non-routable list (distance 101b) and two routes sharing
//   a switch must raise `conflict`; an empty list must leave all switches at
//   PASS.
// Part 2 (NP = 128, 16 uBs): random routable permutation lists in both
//   MODEs are converted and pushed through a real ReCoN together with PE
//   packets built from random weights; every column's result is compared with
//   the reference arithmetic (inlier product, merged outlier, pruned iAcc).
module tb_recon_cfg_gen;
  import msq_pkg::*;
  import msq_ref_pkg::*;

  localparam int NPA = 8, NSTA = 4;
  localparam int NP = 128, NST = 8, NMB = 16, COLS = 64;

  int checks = 0, failures = 0;

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- part 1
  mode_e a_mode;
  logic a_has [1];
  perm_list_t a_perm [1];
  sw_cfg_e a_cfg [NSTA][NPA];
  logic [NPA-1:0] a_ohalf, a_oupper;
  logic a_conflict;
  recon_cfg_gen #(.NP(NPA)) u_a (.mode(a_mode), .has_out(a_has), .perm(a_perm),
    .cfg(a_cfg), .ohalf(a_ohalf), .oupper(a_oupper), .conflict(a_conflict));

  // ---- part 2
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mode_e b_mode;
  logic b_has [NMB];
  perm_list_t b_perm [NMB];
  sw_cfg_e b_cfg [NST][NP];
  logic [NP-1:0] b_ohalf, b_oupper;
  logic b_conflict;
  logic b_valid, o_valid;
  logic [5:0] o_tag;
  logic signed [7:0] b_iact;
  recon_pkt_t b_pkt [NP], o_pkt [NP];
  recon_cfg_gen #(.NP(NP)) u_b (.mode(b_mode), .has_out(b_has), .perm(b_perm),
    .cfg(b_cfg), .ohalf(b_ohalf), .oupper(b_oupper), .conflict(b_conflict));
  recon #(.NP(NP)) u_net (.clk, .rst_n, .in_valid(b_valid), .in_tag(6'd0), .in_mode(b_mode),
    .in_iact(b_iact), .in_cfg(b_cfg), .in_pkt(b_pkt), .out_valid(o_valid), .out_tag(o_tag),
    .out_pkt(o_pkt));

  function automatic int count_non_pass();
    int n = 0;
    for (int k = 0; k < NSTA; k++) for (int c = 0; c < NPA; c++) if (a_cfg[k][c] != SW_PASS) n++;
    return n;
  endfunction

  initial begin
    msq_op op;
    int iacc [NP];
    int exp_v [NP];
    int pos;
    // ---------------- part 1
    a_mode = MODE_2B; a_has[0] = 1'b1; a_perm[0] = '0;
    a_perm[0][0] = '{upper: 3'd3, lower: 3'd0};
    #1;
    chk("walk SWAP c0 s0", a_cfg[0][0], SW_SWAP);
    chk("walk FWD c1 s1", a_cfg[1][1], SW_FWD);
    chk("walk MERGE c3 s2", a_cfg[2][3], SW_MERGE);
    chk("walk others PASS", count_non_pass(), 3);
    chk("walk ohalf", a_ohalf, 8'b0000_1001);
    chk("walk oupper", a_oupper, 8'b0000_1000);
    chk("walk no conflict", a_conflict, 0);
    a_perm[0][0] = '{upper: 3'd5, lower: 3'd0}; #1;
    chk("distance 101b conflicts", a_conflict, 1);
    a_perm[0][0] = '{upper: 3'd2, lower: 3'd1};
    a_perm[0][1] = '{upper: 3'd6, lower: 3'd0}; #1;
    chk("shared switch conflicts", a_conflict, 1);
    a_perm[0][1] = '{upper: 3'd3, lower: 3'd0}; #1;
    chk("crossing routes do not conflict", a_conflict, 0);
    chk("two routes six switches", count_non_pass(), 6);
    a_has[0] = 1'b0; #1;
    chk("identifier 0 -> all PASS", count_non_pass(), 0);
    chk("identifier 0 -> no halves", a_ohalf, 0);
    a_has[0] = 1'b1; a_perm[0] = '0; #1;
    chk("empty list -> all PASS", count_non_pass(), 0);
    // 4-bit MODE: NP = 8 holds 4 columns, less than one uB, so nothing is routed
    a_mode = MODE_4B; a_perm[0][0] = '{upper: 3'd1, lower: 3'd0}; #1;
    chk("4b partial uB ignored", count_non_pass(), 0);

    // ---------------- part 2
    b_valid = 0; b_iact = 0; b_mode = MODE_2B;
    foreach (b_has[m]) begin b_has[m] = 0; b_perm[m] = '0; end
    foreach (b_pkt[c]) b_pkt[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      bit m2;
      int ia;
      m2 = 1'(t % 2);
      op = new(1, COLS, m2);
      op.randomize_op(60);
      b_mode = m2 ? MODE_2B : MODE_4B;
      for (int m = 0; m < NMB; m++) begin
        b_has[m]  = (m < op.npos / 8) ? op.mb_has(0, m) : 1'b0;
        b_perm[m] = (m < op.npos / 8) ? op.perm(0, m) : '0;
      end
      ia = int'($signed(8'($urandom)));
      b_iact = 8'(ia);
      for (int c = 0; c < NP; c++) begin
        iacc[c] = int'($signed(16'($urandom)));
        b_pkt[c] = '{sgn: 1'b0, res: 0, acc: iacc[c]};
        exp_v[c] = iacc[c];
      end
      for (int p = 0; p < op.npos; p++) begin
        int half;
        half = 0;
        pos = m2 ? p : 2 * p;
        foreach (op.up[0][i]) if (op.up[0][i] == p || op.lo[0][i] == p) half = 1;
        b_pkt[pos].sgn = 1'(op.code[0][p] >> (op.bb() - 1));
        b_pkt[pos].res = ia * op.sval(op.code[0][p]);
        if (!half) b_pkt[pos].acc = iacc[pos] + ia * op.sval(op.code[0][p]);
        exp_v[pos] = iacc[pos] + op.expect_pos(p, '{ia});
      end
      #1;
      chk("random list routable", b_conflict, 0);
      for (int p = 0; p < op.npos; p++) begin
        bit h, u;
        h = 0; u = 0;
        pos = m2 ? p : 2 * p;
        foreach (op.up[0][i]) begin
          if (op.up[0][i] == p) begin h = 1; u = 1; end
          if (op.lo[0][i] == p) h = 1;
        end
        chk("ohalf", b_ohalf[pos], h);
        chk("oupper", b_oupper[pos], u);
      end
      b_valid = 1;
      @(posedge clk); #1;
      b_valid = 0;
      repeat (NST - 1) @(posedge clk);
      #1;
      chk("out valid after NST", o_valid, 1);
      for (int c = 0; c < NP; c++) chk($sformatf("t%0d col %0d", t, c), longint'(o_pkt[c].acc), exp_v[c]);
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
