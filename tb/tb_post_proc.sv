// tb_post_proc: self-checking test of the post-processing unit (COLS = 4).
// Random partial sums, MXScale bytes, inlier/iAct scale factors, outlier
// column masks, output precision (MX-INT-8 / MX-INT-4) and both MODEs are
// streamed through with random back-pressure; each accepted word is predicted
// by the reference (pp_ref: shift inlier-only outputs by O_l1 + uX - 2 I_sf,
// scale by the output scale O_l1 + uX - I_sf + iAct_sf, saturate) and checked
// in order, together with the output shared scale. Includes the case where
// every column is an outlier column and the unit latency of one cycle.
module tb_post_proc;
  import msq_pkg::*;
  import msq_ref_pkg::*;
  localparam int COLS = 4, NP = 2 * COLS;

  logic clk = 0, rst_n = 0;
  mode_e mode;
  logic q4;
  logic [7:0] mxscale;
  logic signed [7:0] i_sf, iact_sf;
  logic [NP-1:0] col_outlier;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [COLS*32-1:0] in_psum;
  logic signed [7:0] oact [NP];
  logic signed [9:0] oact_sf;
  int checks = 0, failures = 0;

  post_proc #(.COLS(COLS)) dut (.*);

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

  int exp_q [$];

  initial begin
    int n;
    n = 0;
    mode = MODE_2B; q4 = 0; mxscale = 0; i_sf = 0; iact_sf = 0; col_outlier = '0;
    in_valid = 0; out_ready = 0; in_psum = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // latency: a word accepted in one cycle is visible after the next edge
    @(negedge clk);
    in_valid = 1; out_ready = 1; in_psum = '0; in_psum[15:0] = 16'd100;
    @(posedge clk); #1;
    in_valid = 0;
    chk("latency 1 cycle", out_valid, 1);
    chk("identity value", oact[0], 100);
    @(posedge clk); #1;
    while (n < 3000) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin
        mode = mode_e'($urandom_range(0, 1));
        q4 = 1'($urandom);
        mxscale = 8'($urandom_range(0, 255));
        i_sf = 8'($signed(4'($urandom)));
        iact_sf = 8'($signed(4'($urandom)));
        col_outlier = (n % 50 == 7) ? '1 : NP'($urandom);
        for (int c = 0; c < COLS; c++)
          in_psum[32*c +: 32] = ($urandom_range(0, 1)) ? $urandom : 32'($signed(12'($urandom)));
        in_valid = ($urandom_range(0, 3) != 0);
      end
      out_ready = ($urandom_range(0, 2) != 0);
      #1;
      if (out_valid && out_ready) begin
        chk("oact_sf", oact_sf, exp_q.pop_front());
        for (int p = 0; p < NP; p++) chk($sformatf("oact %0d", p), oact[p], exp_q.pop_front());
        n++;
      end
      if (in_valid && in_ready) begin
        int o_l1, ux;
        if (mode == MODE_2B) begin
          o_l1 = int'($signed(mxscale[7:1])); ux = mxscale[0];
        end else begin
          o_l1 = int'($signed(mxscale[7:3])); ux = mxscale[2:0];
        end
        exp_q.push_back(o_l1 + ux - int'(i_sf) + int'(iact_sf));
        for (int p = 0; p < NP; p++) begin
          int v;
          if (mode == MODE_2B) v = int'($signed(in_psum[32*(p/2) + 16*(p%2) +: 16]));
          else v = (p % 2 == 0) ? int'(in_psum[32*(p/2) +: 32]) : 0;
          exp_q.push_back(pp_ref(v, col_outlier[p], mode == MODE_2B, q4, mxscale, i_sf, iact_sf));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
