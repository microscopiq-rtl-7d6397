// recon_arbiter: ReCoN input interface arbitration between PE rows.
//
// What it does: ReCoN is shared by all PE rows and time-multiplexed. Every
// row whose micro-blocks hold outliers requests ReCoN when it has a result;
// the arbiter grants one row per cycle (the grant is the ACK the paper's
// synchronization buffer returns to the accepted row) and the other
// contenders hold their results and are served in later cycles. With N rows
// contending, the last one served waits N-1 cycles, as the paper states.
//
// How it works: round-robin priority starting after the last granted row,
// the "fair scheduling" the paper asks for (the policy itself is this
// design's choice). A request is only eligible when `room` says its
// destination can take the result NST cycles later; the credit bookkeeping
// lives in msq_core. `contend` is high in a cycle with more than one request;
// it feeds the access-conflict statistics.
//
// Interface: req/room sampled combinationally; gnt is one-hot and
// combinational; the priority pointer updates on the clock.
module recon_arbiter #(
  parameter int unsigned N = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic [N-1:0] room,
  output logic [N-1:0] gnt,
  output logic         gnt_any,
  output logic [$clog2(N)-1:0] gnt_idx,
  output logic         contend
);

  logic [$clog2(N)-1:0] last_q;
  logic [N-1:0] elig;

  always_comb begin
    logic [$clog2(N)-1:0] idx;
    logic found;
    elig    = req & room;
    gnt     = '0;
    gnt_any = 1'b0;
    gnt_idx = '0;
    found   = 1'b0;
    idx     = 0;
    for (int unsigned i = 1; i <= N; i++) begin
      idx = $clog2(N)'((32'(last_q) + i) % N);
      if (!found && elig[idx]) begin
        found        = 1'b1;
        gnt[idx]     = 1'b1;
        gnt_idx      = idx;
      end
    end
    gnt_any = found;
    contend = ($countones(req) > 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       last_q <= $clog2(N)'(N - 1);
    else if (gnt_any) last_q <= gnt_idx;
  end

endmodule
