// tb_pe_row: self-checking test of one PE row (COLS = 4) with its
// valid/ready output register. Weights are loaded, then random iActs and
// incoming partial sums are streamed in with random in_valid and random
// out_ready back-pressure. Every accepted token is predicted with the
// reference arithmetic (inlier: iAcc + iAct*w per lane; outlier half:
// Res = iAct*w and iAcc passed on untouched) and compared, in order, when the
// row's output handshakes. Checks both MODEs, the stall (in_ready low while
// the output is held) and that no token is lost or duplicated.
module tb_pe_row;
  import msq_pkg::*;
  localparam int COLS = 4, NP = 2 * COLS;

  logic clk = 0, rst_n = 0;
  logic w_load;
  logic [COLS*4-1:0] w_row;
  logic [NP-1:0] opresent;
  mode_e mode;
  logic in_valid, in_ready, out_valid, out_ready;
  logic signed [7:0] iact, out_iact;
  logic [COLS*32-1:0] in_psum;
  recon_pkt_t out_pkt [NP];
  int checks = 0, failures = 0, stalls = 0;

  pe_row #(.COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

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

  function automatic int s2(int c); return (c >= 2) ? c - 4 : c; endfunction
  function automatic int s4(int c); return (c >= 8) ? c - 16 : c; endfunction

  longint exp_q [$];   // per token: iact then NP x (sgn, res, acc)

  task automatic predict();
    exp_q.push_back(longint'(iact));
    for (int c = 0; c < COLS; c++) begin
      int w = int'(w_row[4*c +: 4]);
      int ia = int'(iact);
      if (mode == MODE_2B) begin
        for (int h = 0; h < 2; h++) begin
          int wc = (w >> (2 * h)) & 3;
          int lane = int'($signed(in_psum[32*c + 16*h +: 16]));
          if (opresent[2*c + h]) begin
            exp_q.push_back(wc >> 1); exp_q.push_back(ia * s2(wc)); exp_q.push_back(lane);
          end else begin
            exp_q.push_back(0); exp_q.push_back(0);
            exp_q.push_back(longint'($signed(16'(lane + ia * s2(wc)))));
          end
        end
      end else begin
        int acc = int'(in_psum[32*c +: 32]);
        if (opresent[2*c]) begin
          exp_q.push_back(w >> 3); exp_q.push_back(ia * s4(w)); exp_q.push_back(acc);
        end else begin
          exp_q.push_back(0); exp_q.push_back(0); exp_q.push_back(acc + ia * s4(w));
        end
        exp_q.push_back(0); exp_q.push_back(0); exp_q.push_back(0);
      end
    end
  endtask

  initial begin
    w_load = 0; w_row = '0; opresent = '0; mode = MODE_2B;
    in_valid = 0; out_ready = 0; iact = 0; in_psum = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int ph = 0; ph < 8; ph++) begin
      int got, sent;
      got = 0; sent = 0;
      // load weights while idle
      @(negedge clk);
      mode = ph % 2 ? MODE_4B : MODE_2B;
      w_row = COLS*4'($urandom);
      w_load = 1;
      @(negedge clk);
      w_load = 0;
      opresent = NP'($urandom);
      while (got < 200) begin
        @(negedge clk);
        in_valid  = (sent < 200) && ($urandom_range(0, 3) != 0);
        out_ready = ($urandom_range(0, 2) != 0);
        iact = 8'($urandom);
        for (int c = 0; c < COLS; c++) in_psum[32*c +: 32] = $urandom;
        #1;
        chk("in_ready rule", in_ready, !out_valid || out_ready);
        if (in_valid && !in_ready) stalls++;
        if (out_valid && out_ready) begin
          chk("out iact", longint'(out_iact), exp_q.pop_front());
          for (int p = 0; p < NP; p++) begin
            chk($sformatf("p%0d sgn", p), out_pkt[p].sgn, exp_q.pop_front());
            chk($sformatf("p%0d res", p), longint'(out_pkt[p].res), exp_q.pop_front());
            chk($sformatf("p%0d acc", p), longint'(out_pkt[p].acc), exp_q.pop_front());
          end
          got++;
        end
        if (in_valid && in_ready) begin
          predict();
          sent++;
        end
      end
      in_valid = 0;
    end
    chk("stalls happened", stalls > 0, 1);
    chk("queue empty", exp_q.size(), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
