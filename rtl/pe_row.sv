// pe_row: one row of the MicroScopiQ weight-stationary PE array.
//
// What it does: COLS multi-precision PEs that share the row's iAct (the
// paper's walk-through feeds one iAct to all PEs of a row) multiply it by
// their stationary weights and add the products to the incoming partial
// sums. Lanes that hold outlier halves are not accumulated but forwarded as
// {Res, iAcc} for ReCoN. The row's results are held in one output register.
//
// How it works: a single pipeline stage with a valid/ready handshake. A new
// input is taken when the output register is empty or is being drained in
// the same cycle; a row whose result waits for ReCoN therefore stalls the
// rows above it, the fine-grained handshaking on the iAct/iAcc stream that
// the paper gives the controller. The result is kept as one packet per
// weight position (2 per column: position 2c is weight bits [1:0] of column
// c, position 2c+1 bits [3:2]) together with the iAct, which ReCoN needs for
// the hidden bit. Instead of a skewed systolic wavefront, all PEs of a row
// see the iAct in the same cycle (this design's choice), so the row's
// outputs leave aligned and no synchronization buffer is needed.
//
// Interface: w_load writes w_row into the COLS weight registers; opresent
// holds the Outlier_Present bit of every position (set while loading).
// in_psum packs the COLS incoming partial sums, column c at
// [c*PSUM_W +: PSUM_W]. Latency one cycle.
module pe_row
  import msq_pkg::*;
#(
  parameter int unsigned COLS = 64,
  localparam int unsigned NP  = 2 * COLS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    w_load,
  input  logic [COLS*W_W-1:0]     w_row,
  input  logic [NP-1:0]           opresent,
  input  mode_e                   mode,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [ACT_W-1:0] iact,
  input  logic [COLS*PSUM_W-1:0]  in_psum,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic signed [ACT_W-1:0] out_iact,
  output recon_pkt_t              out_pkt [NP]
);

  recon_pkt_t pkt [NP];

  for (genvar c = 0; c < COLS; c++) begin : g_pe
    recon_pkt_t p2 [2];
    mp_pe u_pe (
      .clk      (clk),
      .rst_n    (rst_n),
      .w_load   (w_load),
      .w_in     (w_row[c*W_W +: W_W]),
      .mode     (mode),
      .iact     (iact),
      .iacc     (in_psum[c*PSUM_W +: PSUM_W]),
      .opresent (opresent[2*c +: 2]),
      .pkt      (p2)
    );
    assign pkt[2*c]   = p2[0];
    assign pkt[2*c+1] = p2[1];
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    out_valid <= 1'b0;
    else if (in_valid && in_ready) out_valid <= 1'b1;
    else if (out_ready)            out_valid <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      out_iact <= iact;
      out_pkt  <= pkt;
    end
  end

endmodule
