// tb_mp_pe: self-checking test of the multi-precision PE.
// Drives random weights, iActs, iAccs, both MODEs and all Outlier_Present
// combinations, and compares every packet with products computed directly
// as iAct * weight (two's complement) and the lane/chained sums.
module tb_mp_pe;
  import msq_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic w_load;
  logic [3:0] w_in;
  mode_e mode;
  logic signed [7:0] iact;
  logic [31:0] iacc;
  logic [1:0] opres;
  recon_pkt_t pkt [2];
  int checks = 0, failures = 0;

  mp_pe dut (.clk, .rst_n, .w_load, .w_in, .mode, .iact, .iacc, .opresent (opres), .pkt);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (w=%h iact=%0d mode=%0d op=%b)",
               what, got, exp, w_in, iact, mode, opres);
    end
  endtask

  initial begin
    w_load = 0; w_in = 0; mode = MODE_4B; iact = 0; iacc = 0; opres = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // paper walk-through, PE row 0: weight 11b (= -1) * 32 + 16 = -16
    @(negedge clk); w_in = 4'b0011; w_load = 1; @(negedge clk); w_load = 0;
    mode = MODE_2B; iact = 32; iacc = {16'd0, 16'd16}; opres = 2'b00; #1;
    chk("walkthrough -16", longint'(pkt[0].acc), -16);
    for (int t = 0; t < 4000; t++) begin
      int wl, wh, w4, ia, l0, l1, p0, p1, p4;
      @(negedge clk);
      w_in = 4'($urandom); w_load = 1;
      @(negedge clk);
      w_load = 0;
      mode  = mode_e'($urandom_range(0, 1));
      iact  = 8'($urandom);
      iacc  = $urandom;
      opres = 2'($urandom);
      #1;
      ia = int'(iact);
      wl = int'($signed(w_in[1:0]));
      wh = int'($signed(w_in[3:2]));
      w4 = int'($signed(w_in));
      if (mode == MODE_2B) begin
        l0 = int'($signed(iacc[15:0]));
        l1 = int'($signed(iacc[31:16]));
        p0 = ia * wl;
        p1 = ia * wh;
        if (opres[0]) begin
          chk("2b lane0 res", longint'(pkt[0].res), p0);
          chk("2b lane0 iacc", longint'(pkt[0].acc), l0);
          chk("2b lane0 sgn", longint'(pkt[0].sgn), w_in[1]);
        end else begin
          chk("2b lane0 acc", longint'(pkt[0].acc), longint'($signed(16'(l0 + p0))));
          chk("2b lane0 res0", longint'(pkt[0].res), 0);
        end
        if (opres[1]) begin
          chk("2b lane1 res", longint'(pkt[1].res), p1);
          chk("2b lane1 iacc", longint'(pkt[1].acc), l1);
          chk("2b lane1 sgn", longint'(pkt[1].sgn), w_in[3]);
        end else begin
          chk("2b lane1 acc", longint'(pkt[1].acc), longint'($signed(16'(l1 + p1))));
        end
      end else begin
        p4 = ia * w4;
        if (opres[0]) begin
          chk("4b res", longint'(pkt[0].res), p4);
          chk("4b iacc", longint'(pkt[0].acc), longint'($signed(iacc)));
          chk("4b sgn", longint'(pkt[0].sgn), w_in[3]);
        end else begin
          chk("4b acc", longint'(pkt[0].acc), longint'($signed(32'(int'($signed(iacc)) + p4))));
        end
        chk("4b lane1 idle", longint'(pkt[1].acc) + longint'(pkt[1].res), 0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
