// tb_recon: self-checking test of the ReCoN butterfly pipeline (NP = 8,
// 4 stages). Checks
//  * the paper's walk-through route (Lower half at column 0, Upper at
//    column 3: SWAP col 0 stage 0, FWD col 1 stage 1, MERGE col 3 stage 2)
//    producing 56 in column 3 and the pruned column keeping its iAcc 10;
//  * the latency: a row entering in cycle t leaves in cycle t + NST;
//  * back-to-back rows (one per cycle) with random single-stage and
//    two-stage routes and random inliers, each checked against the merge
//    arithmetic, with the tag returned in order.
module tb_recon;
  import msq_pkg::*;
  localparam int NP = 8;
  localparam int NST = $clog2(NP) + 1;

  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [5:0] in_tag;
  mode_e in_mode;
  logic signed [7:0] in_iact;
  sw_cfg_e in_cfg [NST][NP];
  recon_pkt_t in_pkt [NP];
  logic out_valid;
  logic [5:0] out_tag;
  recon_pkt_t out_pkt [NP];
  int checks = 0, failures = 0;
  int cyc = 0;

  recon #(.NP(NP)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (cycle %0d)", what, got, exp, cyc);
    end
  endtask

  // expected results queue
  int exp_q [$];   // NP values per row, flattened
  int exp_tag [$];
  int exp_cyc [$];

  task automatic clear_in();
    in_valid = 0; in_tag = 0; in_mode = MODE_2B; in_iact = 0;
    for (int k = 0; k < NST; k++) for (int c = 0; c < NP; c++) in_cfg[k][c] = SW_PASS;
    for (int c = 0; c < NP; c++) in_pkt[c] = '0;
  endtask

  // monitor
  always @(posedge clk) if (rst_n && out_valid) begin
    if (exp_tag.size() == 0) begin
      checks++; failures++; $display("FAIL unexpected output");
    end else begin
      chk("tag", out_tag, exp_tag.pop_front());
      chk("latency", cyc - exp_cyc.pop_front(), NST);
      for (int c = 0; c < NP; c++) chk($sformatf("col %0d", c), longint'(out_pkt[c].acc), exp_q.pop_front());
    end
  end

  int nsent = 0;
  task automatic send(int e [NP]);
    in_valid = 1; in_tag = 6'(nsent);
    foreach (e[c]) exp_q.push_back(e[c]); exp_tag.push_back(nsent % 64); exp_cyc.push_back(cyc);
    nsent++;
    @(posedge clk); #1;
    clear_in();
  endtask

  initial begin
    int e [NP];
    clear_in();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // walk-through: iAct 32; col 3 Upper 01b (Res 32, iAcc 8); col 0 Lower 00b (iAcc 10);
    // col 1 inlier weight -1 -> -16+... use the paper's inlier outputs -16 and 48
    in_iact = 32;
    in_pkt[3] = '{sgn: 1'b0, res: 32, acc: 8};
    in_pkt[0] = '{sgn: 1'b0, res: 0, acc: 10};
    in_pkt[1] = '{sgn: 1'b0, res: 0, acc: -16};
    in_pkt[2] = '{sgn: 1'b0, res: 0, acc: 48};
    in_cfg[0][0] = SW_SWAP; in_cfg[1][1] = SW_FWD; in_cfg[2][3] = SW_MERGE;
    e = '{10, -16, 48, 56, 0, 0, 0, 0};
    send(e);
    repeat (NST + 2) @(posedge clk); #1;
    // back-to-back random rows
    for (int t = 0; t < 2000; t++) begin
      int ia, l, u, dsel, mu, ml, s, sg, sh, bb;
      int iacc [NP];
      in_mode = mode_e'($urandom_range(0, 1));
      bb = (in_mode == MODE_2B) ? 2 : 4; sh = bb - 1;
      ia = int'($signed(8'($urandom)));
      in_iact = 8'(ia);
      for (int c = 0; c < NP; c++) begin
        iacc[c] = int'($signed(16'($urandom)));
        in_pkt[c] = '{sgn: 1'($urandom), res: $urandom, acc: iacc[c]};
        e[c] = iacc[c];
      end
      l = $urandom_range(0, NP - 1);
      dsel = $urandom_range(0, 3);
      u = l ^ ((dsel == 0) ? 1 : (dsel == 1) ? 2 : (dsel == 2) ? 3 : 6);
      s = $urandom_range(0, 1); sg = s ? -1 : 1;
      mu = $urandom_range(0, (1 << sh) - 1);
      ml = $urandom_range(0, (1 << sh) - 1);
      in_pkt[u] = '{sgn: s[0], res: ia * (mu - s * (1 << sh)), acc: iacc[u]};
      in_pkt[l] = '{sgn: s[0], res: ia * (ml - s * (1 << sh)), acc: iacc[l]};
      e[u] = iacc[u] + ((sg * ia * mu) >>> sh) + ((sg * ia * ml) >>> (2 * sh)) + sg * ia;
      case (dsel)
        0: begin in_cfg[0][l] = SW_SWAP; in_cfg[1][u] = SW_MERGE; end
        1: begin in_cfg[1][l] = SW_SWAP; in_cfg[2][u] = SW_MERGE; end
        2: begin in_cfg[0][l] = SW_SWAP; in_cfg[1][l ^ 1] = SW_FWD; in_cfg[2][u] = SW_MERGE; end
        default: begin in_cfg[1][l] = SW_SWAP; in_cfg[2][l ^ 2] = SW_FWD; in_cfg[3][u] = SW_MERGE; end
      endcase
      send(e);
      if ($urandom_range(0, 9) == 0) begin @(posedge clk); #1; end
    end
    repeat (NST + 3) @(posedge clk);
    chk("all outputs seen", exp_tag.size(), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
