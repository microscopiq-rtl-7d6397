// tb_msq_top_full: end-to-end test of the accelerator at its default size
// (64 x 64 PE array, 128-position ReCoN, default buffers; msq_top is
// instantiated without parameter overrides). Four operations (both MODEs,
// both output precisions) of 14 tokens each with 30 % of uBs holding
// outliers. The test itself is in msq_top_tb_body.svh.
module tb_msq_top_full;
  import msq_pkg::*;
  import msq_ref_pkg::*;
  localparam int ROWS = 64, COLS = 64, NOPS = 4, NT = 14, PCT = 30;
  localparam int WB_DEPTH = 8192, IB_DEPTH = 1024;

  initial begin
    #100000000;
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end

  `include "msq_top_tb_body.svh"

  msq_top dut (.*);
endmodule
