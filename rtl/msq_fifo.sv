// msq_fifo: small synchronous FIFO (helper).
//
// Holds up to DEPTH words of W bits; push and pop may happen in the same
// cycle. dout shows the oldest word whenever count > 0. Used as the landing
// queue in front of each PE row that receives its partial sums from ReCoN.
// The flow-control assertions use rst_n in `disable iff` while the counters
// use it as an asynchronous reset; lint reports this mixed use of rst_n
// (SYNCASYNCNET), which is intended. Not in the paper: the landing queue is
// this design's (see msq_core).
module msq_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [W-1:0]  din,
  input  logic          pop,
  output logic [W-1:0]  dout,
  output logic [CW-1:0] count
);

  logic [W-1:0] mem [DEPTH];
  logic [$clog2(DEPTH)-1:0] rd_q, wr_q;

  function automatic logic [$clog2(DEPTH)-1:0] nxt(logic [$clog2(DEPTH)-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      count <= '0;
    end else begin
      if (push) wr_q <= nxt(wr_q);
      if (pop)  rd_q <= nxt(rd_q);
      count <= count + CW'(push) - CW'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wr_q] <= din;

  assign dout = mem[rd_q];

  // A push into a full FIFO or a pop from an empty one is a flow-control bug.
  assert property (@(posedge clk) disable iff (!rst_n) push |-> (32'(count) < DEPTH || pop));
  assert property (@(posedge clk) disable iff (!rst_n) pop  |-> (count != 0));

endmodule
