// mp_pe: multi-precision MicroScopiQ processing element.
//
// What it does: multiplies the stationary weight register by the row's iAct
// and either accumulates the product into the incoming partial sum (iAcc) or,
// when the weight is one half of a distributed outlier, hands {Res, iAcc} on
// to ReCoN unaccumulated, because only ReCoN can combine the two halves.
//
// How it works (follows the paper's PE figure and its MODE equation):
//  * MUL stage: the 4-bit weight is cut into two 2-bit slices W[3:2], W[1:0]
//    and the 8-bit iAct into two nibbles [7:4], [3:0]. Four 4b x 2b
//    multipliers form P_xy = Wslice_x * iActNibble_y. In 2-bit MODE the
//    register holds two weights and the PE returns two results,
//    {P11<<4 + P10, P01<<4 + P00}; in 4-bit MODE one result,
//    P11<<6 + P10<<2 + P01<<4 + P00.
//    The paper's equation prints the shifts as <<2 and <<4, which are the
//    shifts for 2-bit iAct slices; with the 8-bit iAct split at [7:4]/[3:0]
//    that the figure prints, the exact shifts are the ones used here.
//    Signedness: the upper iAct nibble and the upper weight slice are signed;
//    the lower weight slice is signed in 2-bit MODE (it is a weight of its
//    own) and unsigned in 4-bit MODE.
//  * ADD stage: two LANE_W adders. In 2-bit MODE they run independently (two
//    partial sums, lane 1 = weight bits [3:2], lane 0 = bits [1:0]); in 4-bit
//    MODE a multiplexer feeds the carry of the lower adder into the upper one
//    so they form one PSUM_W adder.
//  * Outlier_Present (one bit per lane) selects the outlier path for that
//    lane: the packet then carries res = product, acc = iAcc and the weight's
//    sign bit. The sign bit is this design's addition: ReCoN needs the
//    outlier's sign for the hidden bit, and with sign-magnitude halves a
//    half with zero magnitude still has a sign.
//
// Interface: w_load/w_in write the weight register (weight stationary).
// mode, iact, iacc and opresent are combinational inputs; pkt[1:0] is the
// combinational result, one packet per lane (lane 1 is zero in 4-bit MODE).
// The row register that follows the PE lives in pe_row.
module mp_pe
  import msq_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     w_load,
  input  logic [W_W-1:0]           w_in,
  input  mode_e                    mode,
  input  logic signed [ACT_W-1:0]  iact,
  input  logic [PSUM_W-1:0]        iacc,      // {lane1, lane0} or one value
  input  logic [1:0]               opresent,  // Outlier_Present per lane
  output recon_pkt_t               pkt [2]
);

  logic [W_W-1:0] wreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      wreg <= '0;
    else if (w_load) wreg <= w_in;
  end

  // ---------------- MUL stage ----------------
  logic signed [2:0] wh_s, wl_s;
  logic signed [4:0] ah_s, al_s;
  logic signed [7:0] p11, p10, p01, p00;

  always_comb begin
    wh_s = {wreg[3], wreg[3:2]};
    wl_s = (mode == MODE_2B) ? {wreg[1], wreg[1:0]} : {1'b0, wreg[1:0]};
    ah_s = {iact[7], iact[7:4]};
    al_s = {1'b0, iact[3:0]};
    p11  = wh_s * ah_s;
    p10  = wh_s * al_s;
    p01  = wl_s * ah_s;
    p00  = wl_s * al_s;
  end

  logic signed [LANE_W-1:0] res_hi, res_lo;   // 2-bit MODE results
  logic signed [PSUM_W-1:0] res4;             // 4-bit MODE result

  always_comb begin
    res_hi = LANE_W'((PSUM_W'(p11) <<< 4) + PSUM_W'(p10));
    res_lo = LANE_W'((PSUM_W'(p01) <<< 4) + PSUM_W'(p00));
    res4   = (PSUM_W'(p11) <<< 6) + (PSUM_W'(p10) <<< 2)
           + (PSUM_W'(p01) <<< 4) + PSUM_W'(p00);
  end

  // ---------------- ADD stage ----------------
  // Addends of the two lane adders, chosen by MODE.
  logic [LANE_W-1:0] add_lo, add_hi;
  logic [LANE_W:0]   sum_lo;
  logic [LANE_W-1:0] sum_hi;
  logic              cin_hi;

  always_comb begin
    if (mode == MODE_2B) begin
      add_lo = res_lo;
      add_hi = res_hi;
    end else begin
      add_lo = res4[LANE_W-1:0];
      add_hi = res4[PSUM_W-1:LANE_W];
    end
    sum_lo = {1'b0, iacc[LANE_W-1:0]} + {1'b0, add_lo};
    cin_hi = (mode == MODE_4B) ? sum_lo[LANE_W] : 1'b0;   // carry mux
    sum_hi = iacc[PSUM_W-1:LANE_W] + add_hi + LANE_W'(cin_hi);
  end

  always_comb begin
    pkt[0] = '0;
    pkt[1] = '0;
    if (mode == MODE_2B) begin
      // lane 0: weight bits [1:0]
      if (opresent[0]) begin
        pkt[0].sgn = wreg[1];
        pkt[0].res = PSUM_W'(res_lo);
        pkt[0].acc = PSUM_W'($signed(iacc[LANE_W-1:0]));
      end else begin
        pkt[0].acc = PSUM_W'($signed(sum_lo[LANE_W-1:0]));
      end
      // lane 1: weight bits [3:2]
      if (opresent[1]) begin
        pkt[1].sgn = wreg[3];
        pkt[1].res = PSUM_W'(res_hi);
        pkt[1].acc = PSUM_W'($signed(iacc[PSUM_W-1:LANE_W]));
      end else begin
        pkt[1].acc = PSUM_W'($signed(sum_hi));
      end
    end else begin
      if (opresent[0]) begin
        pkt[0].sgn = wreg[3];
        pkt[0].res = res4;
        pkt[0].acc = iacc;
      end else begin
        pkt[0].acc = {sum_hi, sum_lo[LANE_W-1:0]};
      end
    end
  end

endmodule
