// msq_ref_pkg: reference model and stimulus helpers shared by the
// testbenches. Everything here is written from the arithmetic the
// accelerator is meant to perform, not from the RTL's structure:
//  * an inlier weight contributes iAct * w (w a two's-complement INT);
//  * a pruned position contributes nothing (its iAcc passes on);
//  * an outlier whose Upper half is {s, mu} and Lower half {s, ml}
//    (sign-magnitude, bb-bit halves, magnitude bb-1 bits) contributes
//      (S*iAct*mu >>> (bb-1)) + (S*iAct*ml >>> 2(bb-1)) + S*iAct,
//    S = -1 if s else +1: the merge of the paper's walk-through
//    ((32>>1) + (0>>2) + 8 + 32 = 56 for 1.10b * 32 + 8).
// Micro-block outlier patterns are drawn from routes that the butterfly can
// carry without two routes sharing a switch (see recon_cfg_gen).
package msq_ref_pkg;

  // One PE-array operation: ROWS x NPOS weight codes and per-row outlier pairs.
  class msq_op;
    int rows, cols, npos;   // npos = 2*cols (2-bit MODE) or cols (4-bit MODE)
    bit mode2b;
    int code [][];          // [row][pos] raw weight code (2 or 4 bits)
    int up   [][$];         // [row] Upper positions
    int lo   [][$];         // [row] Lower positions
    int nmb;                // uBs per row in 2-bit MODE numbering (2*cols/8)

    function new(int rows_, int cols_, bit mode2b_);
      rows = rows_; cols = cols_; mode2b = mode2b_;
      npos = mode2b ? 2 * cols : cols;
      nmb  = 2 * cols / 8;
      code = new[rows];
      up   = new[rows];
      lo   = new[rows];
      foreach (code[r]) code[r] = new[npos];
    endfunction

    function int bb();
      return mode2b ? 2 : 4;
    endfunction

    // random weights; outliers in row r with probability pct_out % per uB
    function void randomize_op(int pct_out);
      int nub = npos / 8;
      for (int r = 0; r < rows; r++) begin
        up[r].delete(); lo[r].delete();
        for (int p = 0; p < npos; p++) code[r][p] = $urandom_range(0, (1 << bb()) - 1);
        for (int m = 0; m < nub; m++) begin
          if ($urandom_range(0, 99) < pct_out) begin
            int kind = $urandom_range(0, 2);
            if (kind == 0) begin
              // one route anywhere in the uB, distance with contiguous bits
              int dl [6] = '{1, 2, 3, 4, 6, 7};
              int l = $urandom_range(0, 7);
              int u = l ^ dl[$urandom_range(0, 5)];
              add_pair(r, m * 8 + u, m * 8 + l);
            end else begin
              // one route in each half of the uB
              for (int h = 0; h < 2; h++) begin
                int l = $urandom_range(0, 3);
                int u = l ^ $urandom_range(1, 3);
                add_pair(r, m * 8 + 4 * h + u, m * 8 + 4 * h + l);
              end
            end
          end
        end
      end
    endfunction

    function void add_pair(int r, int u, int l);
      int s = $urandom_range(0, 1);
      int mmax = (1 << (bb() - 1)) - 1;
      up[r].push_back(u);
      lo[r].push_back(l);
      code[r][u] = (s << (bb() - 1)) | $urandom_range(0, mmax);
      code[r][l] = (s << (bb() - 1)) | $urandom_range(0, mmax);
    endfunction

    function int sval(int c);     // two's-complement value of a weight code
      return (c >= (1 << (bb() - 1))) ? c - (1 << bb()) : c;
    endfunction

    function int merge(int cu, int cl, int iact);
      int sh = bb() - 1;
      int sg = (cu >> sh) & 1 ? -1 : 1;
      int mu = cu & ((1 << sh) - 1);
      int ml = cl & ((1 << sh) - 1);
      return ((sg * iact * mu) >>> sh) + ((sg * iact * ml) >>> (2 * sh)) + sg * iact;
    endfunction

    // expected bottom partial sum of position p for one token
    function int expect_pos(int p, int iact []);
      int acc = 0;
      for (int r = 0; r < rows; r++) begin
        int role = 0, partner = 0;
        foreach (up[r][i]) begin
          if (up[r][i] == p) begin role = 1; partner = lo[r][i]; end
          if (lo[r][i] == p) role = 2;
        end
        if (role == 0)      acc += iact[r] * sval(code[r][p]);
        else if (role == 1) acc += merge(code[r][p], code[r][partner], iact[r]);
      end
      return acc;
    endfunction

    // weight-buffer word of row r: COLS 4-bit slots
    function logic [4095:0] wword(int r);
      logic [4095:0] w = '0;
      for (int c = 0; c < cols; c++) begin
        if (mode2b) begin
          w[4*c +: 2]     = 2'(code[r][2*c]);
          w[4*c + 2 +: 2] = 2'(code[r][2*c + 1]);
        end else begin
          w[4*c +: 4] = 4'(code[r][c]);
        end
      end
      return w;
    endfunction

    // uB identifier bit and permutation list (24 bits) of row r, uB m
    function bit mb_has(int r, int m);
      foreach (up[r][i]) if (up[r][i] / 8 == m) return 1'b1;
      return 1'b0;
    endfunction

    function logic [23:0] perm(int r, int m);
      logic [23:0] v = '0;
      int e = 0;
      foreach (up[r][i]) begin
        if (up[r][i] / 8 == m) begin
          v[6*e +: 6] = {3'(up[r][i] % 8), 3'(lo[r][i] % 8)};
          e++;
        end
      end
      return v;   // unused entries are {0,0}: Upper == Lower
    endfunction

    function bit is_upper_anywhere(int p);
      for (int r = 0; r < rows; r++) foreach (up[r][i]) if (up[r][i] == p) return 1'b1;
      return 1'b0;
    endfunction
  endclass

  // post-processing reference: returns the quantized output
  function automatic int pp_ref(int v, bit outl, bit mode2b, bit q4,
                                int mxs, int isf, int iasf);
    int ol1, ux, osf, shv, a, b, hi, lo;
    if (mode2b) begin
      ol1 = (mxs >> 1) & 8'h7f; if (ol1 >= 64) ol1 -= 128; ux = mxs & 1;
    end else begin
      ol1 = (mxs >> 3) & 5'h1f; if (ol1 >= 16) ol1 -= 32; ux = mxs & 7;
    end
    osf = ol1 + ux - isf + iasf;
    shv = ol1 + ux - 2 * isf;
    a = outl ? v : (shv >= 0 ? v <<< shv : v >>> (-shv));
    b = osf >= 0 ? a >>> osf : a <<< (-osf);
    hi = q4 ? 7 : 127; lo = q4 ? -8 : -128;
    return b > hi ? hi : (b < lo ? lo : b);
  endfunction

endpackage
