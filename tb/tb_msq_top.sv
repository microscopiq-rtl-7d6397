// tb_msq_top: end-to-end test of the accelerator on a reduced array
// (ROWS = 8, COLS = 8, small buffers): 8 operations alternating 2-bit and
// 4-bit MODE and MX-INT-8 / MX-INT-4 outputs, 40 tokens each, 60 % of uBs
// with outliers. The test itself is in msq_top_tb_body.svh.
module tb_msq_top;
  import msq_pkg::*;
  import msq_ref_pkg::*;
  localparam int ROWS = 8, COLS = 8, NOPS = 8, NT = 40, PCT = 60;
  localparam int WB_DEPTH = 64, IB_DEPTH = 64;

  initial begin
    #100000000;
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end

  `include "msq_top_tb_body.svh"

  msq_top #(.ROWS(ROWS), .COLS(COLS), .WB_DEPTH(WB_DEPTH), .IB_DEPTH(IB_DEPTH)) dut (.*);
endmodule
