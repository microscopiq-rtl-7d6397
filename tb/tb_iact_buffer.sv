// tb_iact_buffer: self-checking test of the banked iAct buffer (ROWS = 4,
// DEPTH = 64). Random bytes are written to random banks and addresses while
// a reference array tracks the contents; every cycle all banks are read at
// independent random addresses and compared (combinational read). Checks
// that a write reaches only its own bank and that reads are signed.
module tb_iact_buffer;
  localparam int ROWS = 4, DEPTH = 64;
  logic clk = 0;
  logic wr_en;
  logic [1:0] wr_bank;
  logic [5:0] wr_addr;
  logic [7:0] wr_data;
  logic [5:0] rd_addr [ROWS];
  logic signed [7:0] rd_data [ROWS];
  int checks = 0, failures = 0;
  int ref_mem [ROWS][DEPTH];

  iact_buffer #(.ROWS(ROWS), .DEPTH(DEPTH)) dut (.*);

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
    wr_en = 0; wr_bank = 0; wr_addr = 0; wr_data = 0;
    foreach (rd_addr[r]) rd_addr[r] = 0;
    // fill everything first so every location read is defined
    for (int r = 0; r < ROWS; r++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 2'(r); wr_addr = 6'(a); wr_data = 8'(r * 64 + a);
        ref_mem[r][a] = int'($signed(8'(r * 64 + a)));
      end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      foreach (rd_addr[r]) rd_addr[r] = 6'($urandom);
      #1;
      foreach (rd_addr[r]) chk($sformatf("bank %0d", r), rd_data[r], ref_mem[r][rd_addr[r]]);
      wr_en = 1'($urandom); wr_bank = 2'($urandom); wr_addr = 6'($urandom); wr_data = 8'($urandom);
      @(posedge clk);
      if (wr_en) ref_mem[wr_bank][wr_addr] = int'($signed(wr_data));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
