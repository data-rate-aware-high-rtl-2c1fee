// cf_pkg -- shared types, constants and elaboration-time helpers of the
// continuous-flow CNN layers.
//
// Activations and weights are 8-bit signed integers (the 8-bit precision of
// the evaluated MobileNetV2 builds); partial sums are ACC_W bits wide, which
// is this design's own choice. The package also holds:
//   * the tap geometry of a multi-pixel KPU: for a KxK window whose last
//     pixel arrives on pixel lane `a`, which input lane feeds tap (kr,kc)
//     and by how many pixel beats it has to be delayed;
//   * a check whether a given KPU design (anchor lane) ever produces a valid
//     window, so that unused designs are not built (stride > 1);
//   * the default weight function: weights are ROM contents computed from a
//     seed by a small integer hash, so the RTL needs no data files. Replace
//     `weight()` to load a trained model.
//   * the (j,h) selection of a layer for an input data rate (design-space
//     exploration, equations for H_l, J_l, HJ_l and BestRate).
package cf_pkg;

  localparam int DATA_W = 8;   // activation width
  localparam int WGT_W  = 8;   // weight width
  localparam int ACC_W  = 28;  // partial sum / accumulator width

  typedef logic signed [DATA_W-1:0] act_t;
  typedef logic signed [WGT_W-1:0]  wgt_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Distance, in pixels of the raster order, from tap (kr,kc) of a KxK
  // window to the window's last (bottom-right) pixel, image width w.
  function automatic int tap_offset(int kr, int kc, int k, int w);
    return (k - 1 - kr) * w + (k - 1 - kc);
  endfunction

  // Input lane that carries tap (kr,kc) for the KPU design whose window
  // ends on lane a, with p pixels per beat.
  function automatic int tap_lane(int kr, int kc, int k, int w, int p, int a);
    int off;
    off = tap_offset(kr, kc, k, w);
    return (((a - off) % p) + p) % p;
  endfunction

  // Delay in beats (ceil((off-a)/p)) of tap (kr,kc) for that design.
  function automatic int tap_delay(int kr, int kc, int k, int w, int p, int a);
    int off;
    off = tap_offset(kr, kc, k, w);
    return (off - a + p - 1) / p;
  endfunction

  // Largest tap delay in beats over all designs.
  function automatic int max_delay(int k, int w, int p);
    return (tap_offset(0, 0, k, w) + p - 1) / p;
  endfunction

  // Does the KPU design anchored on lane a ever see the last pixel of a
  // valid output window? Images follow each other without gaps, so lane
  // positions repeat after p images.
  function automatic bit design_used(int a, int w, int h, int k, int s,
                                     int pd, int p);
    int ho, wo, rl, cl, q;
    ho = (h + 2 * pd - k) / s + 1;
    wo = (w + 2 * pd - k) / s + 1;
    for (int img = 0; img < p; img++)
      for (int orow = 0; orow < ho; orow++)
        for (int ocol = 0; ocol < wo; ocol++) begin
          rl = orow * s - pd + k - 1;
          cl = ocol * s - pd + k - 1;
          q  = img * w * h + rl * w + cl;
          if (q % p == a) return 1'b1;
        end
    return 1'b0;
  endfunction

  // Default ROM contents: a hash of (seed, output neuron, input feature,
  // tap) mapped to the range -8..7.
  function automatic wgt_t weight(int seed, int o, int i, int t);
    logic [31:0] x;
    x = 32'(seed) * 32'h9E37_79B1 ^ 32'(o) * 32'h85EB_CA6B
      ^ 32'(i) * 32'hC2B2_AE35 ^ 32'(t) * 32'h27D4_EB2F;
    x = x ^ (x >> 15);
    x = x * 32'h2C1B_3C6D;
    x = x ^ (x >> 12);
    return wgt_t'($signed(x[3:0]));
  endfunction

  // Re-quantisation between layers: ReLU, arithmetic shift, saturation to
  // the activation range.
  function automatic act_t requant(acc_t v, int shift);
    acc_t s;
    if (v < 0) return '0;
    s = v >>> shift;
    if (s > acc_t'(127)) return act_t'(127);
    return act_t'(s);
  endfunction

  // ---------------------------------------------------------------------
  // (j,h) selection for a layer with d_in inputs and d_out outputs per pixel
  // and an input rate rn/rd features per clock. j must divide d_in, h must
  // divide d_out and j/h >= rn/rd; among those the smallest j/h is taken and,
  // among equal rates, the largest h (fewest units). Returns {j, h}.
  function automatic int select_j(int d_in, int d_out, int rn, int rd);
    int bj, bh;
    bj = d_in; bh = 1;
    for (int j = 1; j <= d_in; j++)
      if (d_in % j == 0)
        for (int h = 1; h <= d_out; h++)
          if (d_out % h == 0 && j * rd >= rn * h)
            if (j * bh < bj * h || (j * bh == bj * h && h > bh)) begin
              bj = j; bh = h;
            end
    return bj;
  endfunction

  function automatic int select_h(int d_in, int d_out, int rn, int rd);
    int j;
    j = select_j(d_in, d_out, rn, rd);
    for (int h = d_out; h >= 1; h--)
      if (d_out % h == 0 && j * rd >= rn * h) begin
        // the selected pair has the smallest j/h; find its h again
        if (select_rate_ok(d_in, d_out, rn, rd, j, h)) return h;
      end
    return 1;
  endfunction

  // True when (j,h) reaches the best (smallest admissible) rate.
  function automatic bit select_rate_ok(int d_in, int d_out, int rn, int rd,
                                        int j, int h);
    for (int jj = 1; jj <= d_in; jj++)
      if (d_in % jj == 0)
        for (int hh = 1; hh <= d_out; hh++)
          if (d_out % hh == 0 && jj * rd >= rn * hh && jj * h < j * hh)
            return 1'b0;
    return 1'b1;
  endfunction

endpackage
