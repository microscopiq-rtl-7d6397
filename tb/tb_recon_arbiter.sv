// tb_recon_arbiter: self-checking test of the round-robin ReCoN arbiter
// (N = 6). Random request and room vectors are applied for many cycles; the
// grant is compared with a reference round robin that starts searching one
// past the last granted row. Also checks one-hot grants, that only eligible
// rows (request and room) are granted, the contention flag, and that every
// row is served when all rows request continuously (no starvation).
module tb_recon_arbiter;
  localparam int N = 6;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req, room, gnt;
  logic gnt_any, contend;
  logic [$clog2(N)-1:0] gnt_idx;
  int checks = 0, failures = 0;
  int last;
  int served [N];

  recon_arbiter #(.N(N)) dut (.*);

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

  initial begin
    req = '0; room = '0;
    last = N - 1;
    foreach (served[i]) served[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6000; t++) begin
      int exp_idx;
      logic [N-1:0] el;
      @(negedge clk);
      if (t < 5000) begin
        req  = N'($urandom);
        room = ($urandom_range(0, 3) == 0) ? N'($urandom) : '1;
      end else begin
        req = '1; room = '1;
      end
      #1;
      el = req & room;
      exp_idx = -1;
      for (int i = 1; i <= N; i++)
        if (exp_idx < 0 && el[(last + i) % N]) exp_idx = (last + i) % N;
      chk("gnt_any", gnt_any, exp_idx >= 0);
      chk("contend", contend, $countones(req) > 1);
      chk("one-hot", $countones(gnt), exp_idx >= 0 ? 1 : 0);
      if (exp_idx >= 0) begin
        chk("gnt_idx", gnt_idx, exp_idx);
        chk("gnt bit", gnt[exp_idx], 1);
        last = exp_idx;
        if (t >= 5000) served[exp_idx]++;
      end
    end
    foreach (served[i]) chk($sformatf("row %0d served fairly", i), served[i], 1000 / N + ((i < 1000 % N) ? 1 : 0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
