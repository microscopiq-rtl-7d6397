// recon: the Redistribution and Coordination NoC (ReCoN).
//
// What it does: takes one PE row's outputs (one packet per weight position),
// moves the Lower half of every distributed outlier to the column of its
// Upper half, merges the two there into the outlier's partial sum, leaves the
// iAcc behind in the pruned column, and passes inliers straight through. The
// result is the row's corrected partial sums, ready for the next PE row.
//
// How it works: a multistage butterfly of NP*(log2(NP)+1) recon_switch
// nodes, as the paper gives it: NST = log2(NP)+1 stages of NP switches. The
// switch of column c at stage k takes its straight input from column c of
// stage k-1 and its cross input from column c ^ 2^(k-1) of stage k-1; stage 0
// takes the PE outputs on its straight input and 0 on its cross input, as the
// paper ties the spare input port of the input stage to 0. The last stage's
// cross outputs are unused (tied to 0 in the paper).
// Each stage is followed by a register, so a new row can enter every cycle
// and leaves NST cycles later (the paper: pipeline depth = number of stages).
// The iAct of the row, MODE and the per-switch configuration travel down the
// pipeline with the data, because every stage needs the iAct for the hidden
// bit of a merge (the paper feeds the row's iAct to every stage).
// NP is the number of weight positions of a row: 2 per PE column, so that the
// two packed 2-bit weights of a PE are separate positions in 2-bit MODE
// (this design's choice; the paper sizes ReCoN by "n" only).
//
// Interface: in_valid/in_* are sampled every cycle (no back-pressure: the
// arbiter in front guarantees room downstream); out_valid/out_* appear
// NST cycles later. in_tag is returned with the result (the PE row it came
// from). cfg[k][c] configures the switch of column c at stage k.
module recon
  import msq_pkg::*;
#(
  parameter int unsigned NP    = 128,
  parameter int unsigned TAG_W = 6,
  localparam int unsigned NST  = $clog2(NP) + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [TAG_W-1:0]        in_tag,
  input  mode_e                   in_mode,
  input  logic signed [ACT_W-1:0] in_iact,
  input  sw_cfg_e                 in_cfg [NST][NP],
  input  recon_pkt_t              in_pkt [NP],
  output logic                    out_valid,
  output logic [TAG_W-1:0]        out_tag,
  output recon_pkt_t              out_pkt [NP]
);

  // Pipeline registers in front of stages 1..NST-1 and after the last stage.
  logic                    v_q    [NST];
  logic [TAG_W-1:0]        tag_q  [NST];
  mode_e                   mode_q [NST];
  logic signed [ACT_W-1:0] iact_q [NST];
  sw_cfg_e                 cfg_q  [NST][NST][NP];
  recon_pkt_t              s_q    [NST][NP];
  recon_pkt_t              x_q    [NST][NP];

  // Inputs of each stage.
  logic                    v_i    [NST];
  logic [TAG_W-1:0]        tag_i  [NST];
  mode_e                   mode_i [NST];
  logic signed [ACT_W-1:0] iact_i [NST];
  sw_cfg_e                 cfg_i  [NST][NST][NP];
  recon_pkt_t              s_i    [NST][NP];
  recon_pkt_t              x_i    [NST][NP];
  recon_pkt_t              so     [NST][NP];
  recon_pkt_t              xo     [NST][NP];

  always_comb begin
    v_i[0]    = in_valid;
    tag_i[0]  = in_tag;
    mode_i[0] = in_mode;
    iact_i[0] = in_iact;
    cfg_i[0]  = in_cfg;
    for (int c = 0; c < NP; c++) begin
      s_i[0][c] = in_pkt[c];
      x_i[0][c] = '0;
    end
    for (int k = 1; k < NST; k++) begin
      v_i[k]    = v_q[k-1];
      tag_i[k]  = tag_q[k-1];
      mode_i[k] = mode_q[k-1];
      iact_i[k] = iact_q[k-1];
      cfg_i[k]  = cfg_q[k-1];
      s_i[k]    = s_q[k-1];
      x_i[k]    = x_q[k-1];
    end
  end

  for (genvar k = 0; k < NST; k++) begin : g_stage
    for (genvar c = 0; c < NP; c++) begin : g_col
      recon_switch u_sw (
        .cfg   (cfg_i[k][k][c]),
        .mode  (mode_i[k]),
        .iact  (iact_i[k]),
        .s_in  (s_i[k][c]),
        .x_in  (x_i[k][c]),
        .s_out (so[k][c]),
        .x_out (xo[k][c])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NST; k++) v_q[k] <= 1'b0;
    end else begin
      for (int k = 0; k < NST; k++) v_q[k] <= v_i[k];
    end
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < NST; k++) begin
      tag_q[k]  <= tag_i[k];
      mode_q[k] <= mode_i[k];
      iact_q[k] <= iact_i[k];
      cfg_q[k]  <= cfg_i[k];
      for (int c = 0; c < NP; c++) begin
        s_q[k][c] <= so[k][c];
        // cross link between stage k and k+1 spans 2^k columns
        x_q[k][c] <= (k + 1 < NST) ? xo[k][(c ^ (1 << k)) % NP] : '0;
      end
    end
  end

  assign out_valid = v_q[NST-1];
  assign out_tag   = tag_q[NST-1];
  assign out_pkt   = s_q[NST-1];

endmodule
