// bnn_ref_pkg: reference model for the accelerator testbenches.
//
// Holds one layer's input activations, weights and thresholds as plain bit
// arrays (encoding 0 = +1, 1 = -1), generates them, and computes the expected
// output by direct convolution:
//   sum(ho, wo, k) = sum_{r,s,c} (ia[h][w][c] == wt[k][r][s][c] ? +1 : -1),
//   h = ho + r - pad, w = wo + s - pad (positions outside the map add 0),
//   bit = sum < thr[k], then 2x2 AND pooling if enabled.
// It also predicts the accelerator's event counts from the input alone: which
// channel groups are broadcast whole (first pixel of a row), broadcast as a
// difference, or skipped, and the resulting weight-bank reads and XNOR bit
// operations. For the weight-reuse accelerator it also orders the kernels
// (greedy nearest neighbour by Hamming distance inside sets of 64 kernels),
// builds the same/different masks and predicts that design's counts.
// None of this uses the design's code.
package bnn_ref_pkg;
  import bnn_pkg::*;

  bit ia  [HW_MAX][HW_MAX][C_MAX];
  bit wt  [K_MAX][KR][KS][C_MAX];
  int thr [K_MAX];
  bit out [HW_MAX][HW_MAX][K_MAX];
  int lh, lw, lc, lk, lpad, lpool, loh, low, lph, lpw;

  int seq [K_MAX];        // weight reuse: slot -> original kernel

  // expected counters
  longint e_full, e_diff, e_skip, e_wb, e_ops, e_oor;

  function automatic void set_layer(int h, int w, int c, int k, int pad, int pool);
    lh = h; lw = w; lc = c; lk = k; lpad = pad; lpool = pool;
    loh = h + 2*pad - 2; low = w + 2*pad - 2;
    lph = pool ? loh/2 : loh; lpw = pool ? low/2 : low;
  endfunction

  // flip_pct: chance (%) that a channel differs from its left neighbour;
  // 50 gives a random image, 0 a uniform one.
  function automatic void gen_image(int flip_pct, bit uniform);
    bit v0 [C_MAX];
    for (int c = 0; c < lc; c++) v0[c] = 1'($urandom_range(1));
    for (int h = 0; h < lh; h++)
      for (int w = 0; w < lw; w++)
        for (int c = 0; c < lc; c++) begin
          if (uniform)     ia[h][w][c] = v0[c];
          else if (w == 0) ia[h][w][c] = 1'($urandom_range(1));
          else ia[h][w][c] = ia[h][w-1][c] ^ ($urandom_range(99) < flip_pct);
        end
  endfunction

  function automatic void gen_weights();
    for (int k = 0; k < lk; k++)
      for (int r = 0; r < KR; r++)
        for (int s = 0; s < KS; s++)
          for (int c = 0; c < lc; c++) wt[k][r][s][c] = 1'($urandom_range(1));
    for (int k = 0; k < lk; k++) thr[k] = $urandom_range(16) - 8;
  endfunction

  // Kernels that are near copies of each other: inside every set of 64 the
  // kernels form a chain in a random order, each differing from the one
  // before it in about flip_pm per mille of its weights.
  function automatic void gen_weights_corr(int flip_pm);
    int perm [64];
    for (int b = 0; b < lk; b += 64) begin
      int n;
      n = (lk - b < 64) ? lk - b : 64;
      for (int i = 0; i < n; i++) perm[i] = b + i;
      for (int i = n - 1; i > 0; i--) begin
        int j, t;
        j = $urandom_range(i); t = perm[i]; perm[i] = perm[j]; perm[j] = t;
      end
      for (int i = 0; i < n; i++)
        for (int r = 0; r < KR; r++)
          for (int s = 0; s < KS; s++)
            for (int c = 0; c < lc; c++)
              if (i == 0) wt[perm[i]][r][s][c] = 1'($urandom_range(1));
              else wt[perm[i]][r][s][c] = wt[perm[i-1]][r][s][c] ^
                                          ($urandom_range(999) < flip_pm);
    end
    for (int k = 0; k < lk; k++) thr[k] = $urandom_range(16) - 8;
  endfunction

  function automatic int wdist(int a, int b);
    int d = 0;
    for (int r = 0; r < KR; r++)
      for (int s = 0; s < KS; s++)
        for (int c = 0; c < lc; c++) d += (wt[a][r][s][c] != wt[b][r][s][c]);
    return d;
  endfunction

  // Offline kernel ordering: inside each set of 64 kernels start with the
  // lowest index and always go to the nearest unused kernel.
  function automatic void order_kernels();
    bit used [K_MAX];
    for (int k = 0; k < lk; k++) used[k] = 0;
    for (int b = 0; b < lk; b += 64) begin
      int n;
      n = (lk - b < 64) ? lk - b : 64;
      seq[b] = b; used[b] = 1;
      for (int i = 1; i < n; i++) begin
        int best, bd;
        best = -1; bd = 1 << 30;
        for (int k = b; k < b + n; k++)
          if (!used[k]) begin
            int d;
            d = wdist(seq[b+i-1], k);
            if (d < bd) begin bd = d; best = k; end
          end
        seq[b+i] = best; used[best] = 1;
      end
    end
  endfunction

  // Weight-buffer word of slot j, group g: real weights for the first slot,
  // else the mask against the previous slot. Tap r*3+s at (r*3+s)*CG.
  function automatic logic [WB_W-1:0] wr_word(int j, int g);
    logic [WB_W-1:0] v;
    for (int r = 0; r < KR; r++)
      for (int s = 0; s < KS; s++)
        for (int i = 0; i < CG; i++)
          v[(r*KS+s)*CG+i] = (j == 0) ? wt[seq[j]][r][s][g*CG+i]
                           : (wt[seq[j]][r][s][g*CG+i] ^ wt[seq[j-1]][r][s][g*CG+i]);
    return v;
  endfunction

  // Weight-reuse event counts (call after compute, which sets e_oor).
  function automatic void compute_wr();
    e_full = 0; e_diff = 0; e_skip = 0; e_ops = 0;
    for (int j = 0; j < lk; j++)
      for (int g = 0; g < lc / CG; g++) begin
        logic [WB_W-1:0] v;
        int n;
        v = wr_word(j, g);
        n = $countones(v);
        if (j == 0) begin
          e_full++; e_ops += longint'(lh) * lw * NTAP * CG;
        end else if (n != 0) begin
          e_diff++; e_ops += longint'(lh) * lw * n;
        end else e_skip++;
      end
    e_wb = longint'(lk) * (lc / CG);
  endfunction

  function automatic void compute(int npe);
    int sum;
    bit b [HW_MAX][HW_MAX];
    int kpp = lk / npe;
    e_full = 0; e_diff = 0; e_skip = 0; e_wb = 0; e_ops = 0; e_oor = 0;
    for (int k = 0; k < lk; k++) begin
      for (int ho = 0; ho < loh; ho++)
        for (int wo = 0; wo < low; wo++) begin
          sum = 0;
          for (int r = 0; r < KR; r++)
            for (int s = 0; s < KS; s++) begin
              int h = ho + r - lpad;
              int w = wo + s - lpad;
              if (h >= 0 && h < lh && w >= 0 && w < lw)
                for (int c = 0; c < lc; c++)
                  sum += (ia[h][w][c] == wt[k][r][s][c]) ? 1 : -1;
            end
          b[ho][wo] = (sum < thr[k]);
        end
      for (int py = 0; py < lph; py++)
        for (int px = 0; px < lpw; px++)
          out[py][px][k] = lpool ? (b[2*py][2*px] & b[2*py][2*px+1] &
                                    b[2*py+1][2*px] & b[2*py+1][2*px+1])
                                 : b[py][px];
    end
    for (int h = 0; h < lh; h++)
      for (int w = 0; w < lw; w++) begin
        for (int g = 0; g < lc / CG; g++) begin
          int n = 0;
          for (int i = 0; i < CG; i++)
            if (w > 0 && ia[h][w][g*CG+i] != ia[h][w-1][g*CG+i]) n++;
          if (w == 0) begin
            e_full++; e_ops += longint'(npe) * kpp * NTAP * CG;
          end else if (n != 0) begin
            e_diff++; e_ops += longint'(npe) * kpp * NTAP * n;
          end else e_skip++;
        end
        for (int r = 0; r < KR; r++)
          for (int s = 0; s < KS; s++) begin
            int ho = h - r + lpad;
            int wo = w - s + lpad;
            if (!(ho >= 0 && ho < loh && wo >= 0 && wo < low)) e_oor++;
          end
      end
    e_wb = (e_full + e_diff) * kpp * npe;
  endfunction

  // The output becomes the next layer's input.
  function automatic void adopt_output();
    for (int h = 0; h < lph; h++)
      for (int w = 0; w < lpw; w++)
        for (int k = 0; k < lk; k++) ia[h][w][k] = out[h][w][k];
  endfunction
endpackage
