// msq_ram: on-chip buffer RAM with one write and one read port.
//
// What it does: the storage of the weight buffer (one word = the 4-bit
// weight slots of one PE row; in 2-bit MODE each slot holds two 2-bit
// weights), of the instruction buffer (one word = the metadata of one PE
// row: per-uB outlier identifiers and permutation lists, or the scale
// factors) and of the oAct buffer (one word = the outputs of one token).
//
// How it works: an array of DEPTH words of W bits; the write is synchronous,
// the read registered (one cycle), as an SRAM macro would behave. The sizes
// are set by the instantiating module.
//
// Interface: we/waddr/wdata write; re/raddr read, rdata valid the next
// cycle and held until the next read.
module msq_ram #(
  parameter int unsigned W     = 256,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
