// tb_msq_fifo: self-checking test of the landing-queue FIFO (W = 16,
// DEPTH = 5, a depth that is not a power of two, as in the core where the
// depth is the ReCoN pipeline depth + 1). Random pushes and pops that obey
// flow control (no push when full unless popping, no pop when empty) are
// checked against a reference queue: data order, dout of the oldest word,
// and count. Full and empty states are both required to occur.
module tb_msq_fifo;
  localparam int W = 16, DEPTH = 5;
  logic clk = 0, rst_n = 0;
  logic push, pop;
  logic [W-1:0] din, dout;
  logic [2:0] count;
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic [W-1:0] q [$];

  msq_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

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
    push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 10000; t++) begin
      int bias;
      @(negedge clk);
      bias = (t / 500) % 2;   // alternate filling and draining phases
      pop  = (q.size() > 0) && ($urandom_range(0, 9) < (bias ? 7 : 3));
      push = ($urandom_range(0, 9) < (bias ? 3 : 7)) && (q.size() < DEPTH || pop);
      din  = W'($urandom);
      #1;
      chk("count", count, q.size());
      if (q.size() > 0) chk("dout", dout, q[0]);
      if (q.size() == DEPTH) n_full++;
      if (q.size() == 0) n_empty++;
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    chk("full occurred", n_full > 0, 1);
    chk("empty occurred", n_empty > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
