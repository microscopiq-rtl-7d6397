// iact_buffer: input-activation buffer, one bank per PE row.
//
// What it does: stores the 8-bit INT iActs of the tokens to be processed
// (lower-precision iActs are stored sign-extended, as in the paper). Bank r
// holds the iActs that PE row r consumes, one per token, so every row can
// read its own iAct in the cycle it accepts a partial sum.
//
// How it works: ROWS arrays of DEPTH bytes. One write port fills the
// buffer from the L2 side; each bank has its own asynchronous read port
// addressed by that row's token counter. Default size: 64 banks x 2048 =
// 128 kB. The paper gives 16 kB for an 8x8 array (2048 entries per row) and
// says the buffers grow with the array; keeping 2048 entries per row is
// this design's reading of that.
//
// Interface: wr_en/wr_bank/wr_addr/wr_data write one byte per cycle;
// rd_data[r] = bank r at rd_addr[r], combinational.
module iact_buffer
  import msq_pkg::*;
#(
  parameter int unsigned ROWS  = 64,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned BW   = $clog2(ROWS)
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [BW-1:0]           wr_bank,
  input  logic [AW-1:0]           wr_addr,
  input  logic [ACT_W-1:0]        wr_data,
  input  logic [AW-1:0]           rd_addr [ROWS],
  output logic signed [ACT_W-1:0] rd_data [ROWS]
);

  // one single-write, single-read memory per bank
  for (genvar r = 0; r < ROWS; r++) begin : g_bank
    logic [ACT_W-1:0] mem [DEPTH];

    always_ff @(posedge clk)
      if (wr_en && 32'(wr_bank) == r) mem[wr_addr] <= wr_data;

    assign rd_data[r] = $signed(mem[rd_addr[r]]);
  end

endmodule
