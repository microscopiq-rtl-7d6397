// tb_msq_ram: self-checking test of the on-chip buffer memory (W = 40,
// DEPTH = 32) used for the weight buffer, instruction buffer and oAct
// buffer. Random writes and reads; a read issued in one cycle must return the
// stored word after the next clock edge (one-cycle read latency) and hold it
// while re is low. Read-during-write to the same address returns the old word.
module tb_msq_ram;
  localparam int W = 40, DEPTH = 32;
  logic clk = 0;
  logic we, re;
  logic [4:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_mem [DEPTH];

  msq_ram #(.W(W), .DEPTH(DEPTH)) dut (.*);

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
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    logic [W-1:0] held;
    bit have;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 5'(a); wdata = {$urandom, $urandom};
      ref_mem[a] = wdata;
    end
    @(negedge clk); we = 0;
    held = '0; have = 0;
    for (int t = 0; t < 5000; t++) begin
      logic [W-1:0] expv;
      bit did_read;
      @(negedge clk);
      we = 1'($urandom); waddr = 5'($urandom); wdata = {$urandom, $urandom};
      re = 1'($urandom); raddr = 5'($urandom);
      did_read = re;
      expv = ref_mem[raddr];
      @(posedge clk);
      if (we) ref_mem[waddr] = wdata;
      #1;
      if (did_read) begin
        chk("read 1 cycle", longint'(rdata), longint'(expv));
        held = rdata; have = 1;
      end else if (have) begin
        chk("hold", longint'(rdata), longint'(held));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
