// recon_cfg_gen: ReCoN configuration from the permutation lists of a PE row.
//
// What it does: the instruction buffer holds, for each micro-block (uB) of a
// PE row that contains outliers, a permutation list of B_mu/2 entries
// {Upper_loc, Lower_loc}. This block turns those lists into the 3-bit
// configuration of every ReCoN switch for that row, and marks which weight
// positions hold outlier halves (the PEs' Outlier_Present bits) and which
// hold Upper halves (the columns whose outputs carry an outlier partial sum).
//
// How it works (the routing rule is this design's; the paper shows one
// example route and states that the IB holds "configurations for ReCoN"):
// the Lower half at position l is sent to the Upper half's position u by
// fixing the differing address bits from the least significant up, the
// order in which the butterfly's links get longer. At the first differing
// bit the switch in column l is set to SWAP; at every later differing bit the
// switch the half has reached is set to FWD; the switch in column u at the
// stage after the last differing bit is set to MERGE. All other switches
// PASS. This reproduces the paper's walk-through route (SWAP, SWAP, MERGE
// for Lower at column 0 and Upper at column 3). A butterfly is blocking: a
// half that has already crossed cannot stay in a column that carries its own
// partial sum, and two routes cannot share a switch. Such lists raise
// `conflict`; the paper does not say how they are avoided, so the offline
// quantizer must choose prune positions that route (see the README).
// Positions: in 2-bit MODE, uB m covers positions 8m..8m+7; in 4-bit MODE a
// position is a PE column and column j sits at position 2j.
//
// Routes never leave their uB, so the switches of stages past log2(16)
// are constant PASS (synthesis reports those cfg outputs as constant).
//
// Interface: combinational. has_out[m] is the per-uB 1-bit identifier; an
// entry with Upper_loc == Lower_loc is unused.
module recon_cfg_gen
  import msq_pkg::*;
#(
  parameter int unsigned NP   = 128,
  localparam int unsigned NST = $clog2(NP) + 1,
  localparam int unsigned NMB = NP / MB
) (
  input  mode_e       mode,
  input  logic        has_out [NMB],
  input  perm_list_t  perm    [NMB],
  output sw_cfg_e     cfg     [NST][NP],
  output logic [NP-1:0] ohalf,
  output logic [NP-1:0] oupper,
  output logic        conflict
);

  // A uB's routes never leave the uB, so each uB is routed in a local frame
  // of LP positions and LST stages and the frames are placed into the
  // network afterwards. Local position of entry j: j (2-bit) or 2j (4-bit).
  localparam int unsigned LP  = 2 * MB;
  localparam int unsigned LST = $clog2(LP) + 1;
  localparam int unsigned LW  = $clog2(LP);

  sw_cfg_e        lcfg  [NMB][LST][LP];
  logic [LP-1:0]  lhalf [NMB];
  logic [LP-1:0]  lupper[NMB];
  logic [NMB-1:0] lconf;

  for (genvar m = 0; m < NMB; m++) begin : g_mb
    always_comb begin
      logic [LW-1:0] lp, up, d, cur;
      logic crossed, done;
      lp = '0; up = '0; d = '0; cur = '0; crossed = 1'b0; done = 1'b0;
      for (int k = 0; k < LST; k++)
        for (int c = 0; c < LP; c++)
          lcfg[m][k][c] = SW_PASS;
      lhalf[m]  = '0;
      lupper[m] = '0;
      lconf[m]  = 1'b0;
      if (has_out[m] && (mode == MODE_2B || m < NMB / 2)) begin
        for (int e = 0; e < NPERM; e++) begin
          if (perm[m][e].upper != perm[m][e].lower) begin
            lp = (mode == MODE_2B) ? LW'(perm[m][e].lower) : LW'({perm[m][e].lower, 1'b0});
            up = (mode == MODE_2B) ? LW'(perm[m][e].upper) : LW'({perm[m][e].upper, 1'b0});
            lhalf[m][lp]  = 1'b1;
            lhalf[m][up]  = 1'b1;
            lupper[m][up] = 1'b1;
            d       = lp ^ up;
            cur     = lp;
            crossed = 1'b0;
            done    = 1'b0;
            for (int k = 1; k < LST; k++) begin
              if (!done) begin
                if (d[k-1]) begin
                  if (lcfg[m][k-1][cur] != SW_PASS) lconf[m] = 1'b1;
                  lcfg[m][k-1][cur] = crossed ? SW_FWD : SW_SWAP;
                  cur     = cur ^ LW'(1 << (k - 1));
                  crossed = 1'b1;
                  if ((d >> k) == 0) begin
                    if (lcfg[m][k][cur] != SW_PASS) lconf[m] = 1'b1;
                    lcfg[m][k][cur] = SW_MERGE;
                    done = 1'b1;
                  end
                end else if (crossed) begin
                  lconf[m] = 1'b1;
                end
              end
            end
          end
        end
      end
    end
  end

  // Place the frames: 2-bit MODE uB m at positions 8m.., 4-bit at 16m..
  for (genvar k = 0; k < NST; k++) begin : g_k
    for (genvar c = 0; c < NP; c++) begin : g_c
      if (k < LST) begin : g_used
        always_comb begin
          if (mode == MODE_2B)      cfg[k][c] = lcfg[c / MB][k][c % MB];
          else if (c / LP < NMB)    cfg[k][c] = lcfg[c / LP][k][c % LP];
          else                      cfg[k][c] = SW_PASS;
        end
      end else begin : g_unused
        assign cfg[k][c] = SW_PASS;   // stages past a uB's reach always pass
      end
    end
  end

  always_comb begin
    for (int c = 0; c < NP; c++) begin
      if (mode == MODE_2B) begin
        ohalf[c]  = lhalf[c / MB][c % MB];
        oupper[c] = lupper[c / MB][c % MB];
      end else begin
        ohalf[c]  = lhalf[c / LP][c % LP];
        oupper[c] = lupper[c / LP][c % LP];
      end
    end
    conflict = |lconf;
  end

endmodule
