// tb_recon_switch: self-checking test of one ReCoN switch.
// Checks the paper's walk-through merge (Upper 01b, Lower 00b, iAct 32,
// iAcc 8 -> 56), Pass, Swap (iAcc stays, Lower leaves) and Forward, and
// random merges against the outlier value S*(1 + mu/2^(bb-1) + ml/2^2(bb-1))
// times iAct; with iAct a multiple of 2^2(bb-1) the merge must be exact.
module tb_recon_switch;
  import msq_pkg::*;

  sw_cfg_e cfg;
  mode_e mode;
  logic signed [7:0] iact;
  recon_pkt_t s_in, x_in, s_out, x_out;
  int checks = 0, failures = 0;

  recon_switch dut (.cfg, .mode, .iact, .s_in, .x_in, .s_out, .x_out);

  initial begin
    #1000000;
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

  // PE result for a sign-magnitude half {s, m} multiplied as an INT
  function automatic int pe_res(int s, int m, int ia, int bb);
    return ia * (m - s * (1 << (bb - 1)));
  endfunction

  initial begin
    // walk-through: O_upper = 01b (Res = 32*1 = 32, iAcc 8), O_lower = 00b (Res 0, iAcc 10)
    mode = MODE_2B; iact = 32; cfg = SW_MERGE;
    s_in = '{sgn: 1'b0, res: 32, acc: 8};
    x_in = '{sgn: 1'b0, res: 0, acc: 10};
    #1;
    chk("merge 56", longint'(s_out.acc), 56);
    chk("merge res cleared", longint'(s_out.res), 0);
    chk("merge cross out 0", longint'(x_out.acc), 0);
    cfg = SW_SWAP; s_in = x_in; x_in = '0; #1;
    chk("swap keeps iAcc", longint'(s_out.acc), 10);
    chk("swap sends lower", longint'(x_out.acc), 10);
    chk("swap keeps res on cross", longint'(x_out.res), 0);
    cfg = SW_PASS; s_in = '{sgn: 1'b0, res: 0, acc: -16}; x_in = '{sgn: 1'b1, res: 5, acc: 9}; #1;
    chk("pass", longint'(s_out.acc), -16);
    chk("pass no cross", longint'(x_out.acc), 0);
    cfg = SW_FWD; #1;
    chk("fwd straight", longint'(s_out.acc), -16);
    chk("fwd cross acc", longint'(x_out.acc), 9);
    chk("fwd cross res", longint'(x_out.res), 5);
    for (int t = 0; t < 3000; t++) begin
      int bb, sh, s, mu, ml, ia, iacc, sg, exp4;
      mode = mode_e'($urandom_range(0, 1));
      bb = (mode == MODE_2B) ? 2 : 4;
      sh = bb - 1;
      s  = $urandom_range(0, 1);
      mu = $urandom_range(0, (1 << sh) - 1);
      ml = $urandom_range(0, (1 << sh) - 1);
      ia = (t % 2) ? int'($signed(8'($urandom))) : 4 * int'($signed(6'($urandom))) * ((bb == 4) ? 16 : 1) / ((bb == 4) ? 16 : 1);
      if (bb == 4 && (t % 2 == 0)) ia = 64 * $urandom_range(0, 1) - 64 * $urandom_range(0, 1);
      iacc = int'($signed(16'($urandom)));
      sg = s ? -1 : 1;
      iact = 8'(ia);
      cfg  = SW_MERGE;
      s_in = '{sgn: s[0], res: pe_res(s, mu, ia, bb), acc: iacc};
      x_in = '{sgn: s[0], res: pe_res(s, ml, ia, bb), acc: $urandom};
      #1;
      chk("merge formula", longint'(s_out.acc),
          iacc + ((sg * ia * mu) >>> sh) + ((sg * ia * ml) >>> (2 * sh)) + sg * ia);
      if (t % 2 == 0) begin
        // exact: iAcc + S * iAct * (2^2sh + mu*2^sh + ml) / 2^2sh
        exp4 = iacc + sg * ia * ((1 << (2 * sh)) + mu * (1 << sh) + ml) / (1 << (2 * sh));
        chk("merge exact", longint'(s_out.acc), exp4);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
