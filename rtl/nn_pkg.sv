// nn_pkg: shared fixed-point types and schedule functions for the trigger
// neural-network pipeline.
//
// Values travel between layers as 14-bit two's-complement fixed-point numbers
// with 8 fractional bits ("6.8"); weights are 10-bit "2.8" numbers. These are
// the precisions used for every network result the design was evaluated with.
// A DSP product therefore has 16 fractional bits; sums are kept at ACC_W bits
// and brought back to 6.8 by dropping WGT_F fractional bits and saturating
// (this rounding rule is a choice of this implementation).
//
// The second half of the package holds the schedule of every layer type as
// constant functions: for each layer, at which cycle after its start it
// produces an output row ("available") and at which cycle it first/last reads
// an input row ("needed"). The network top uses them to compute the minimum
// start delay between consecutive layers (largest available-minus-needed
// difference) and to check that no input is overwritten by the next data set
// before its last use. In the original flow a generator script did this.
package nn_pkg;

  localparam int VAL_W = 14;   // 6.8 value
  localparam int VAL_F = 8;
  localparam int WGT_W = 10;   // 2.8 weight
  localparam int WGT_F = 8;
  localparam int ACC_W = 32;   // DSP accumulator width kept between DSPs

  typedef logic signed [VAL_W-1:0] val_t;
  typedef logic signed [WGT_W-1:0] wgt_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  localparam val_t VAL_MAX = val_t'({1'b0, {(VAL_W-1){1'b1}}});
  localparam val_t VAL_MIN = val_t'({1'b1, {(VAL_W-1){1'b0}}});

  // Pooling padding modes.
  typedef enum logic [1:0] {PAD_VALID = 2'd0, PAD_SAME = 2'd1, PAD_UNCHANGED = 2'd2} pad_e;

  // Sum with VAL_F+WGT_F fractional bits -> 6.8 value: drop WGT_F bits
  // (arithmetic shift, i.e. round towards minus infinity) and saturate.
  function automatic val_t rescale(input acc_t a);
    acc_t s;
    s = a >>> WGT_F;
    if (s > acc_t'(VAL_MAX)) return VAL_MAX;
    if (s < acc_t'(VAL_MIN)) return VAL_MIN;
    return val_t'(s);
  endfunction

  function automatic int cdiv(input int a, input int b);
    return (a + b - 1) / b;
  endfunction

  function automatic int clog2c(input int n);   // ceil(log2 n), 0 for n <= 1
    int r;
    r = 0;
    while ((1 << r) < n) r++;
    return r;
  endfunction

  function automatic int imax(input int a, input int b);
    return (a > b) ? a : b;
  endfunction

  // ---------------------------------------------------------------- dense
  // Fully-connected layer: N_NU = ceil(N_N/C) neuron units, S = ceil(N_I/P)
  // pipeline stages. Stage s inputs must be written in cycle s after start;
  // result slot m (neurons m*N_NU .. m*N_NU+N_NU-1) is written at
  // dense_latency + m.
  function automatic int dense_latency(input int n_i, input int p, input int act_ff);
    return cdiv(n_i, p) + 3 + clog2c(p) + act_ff;
  endfunction

  // ---------------------------------------------------------------- conv
  // Regular-case row-unit allocation: RU r handles output slices
  // r, r+N_RU, ...; in slice range j (cycles j*D_O .. j*D_O+D_O-1) it steps
  // through the output channels.
  function automatic int conv_n_ru(input int h_o, input int d_o, input int c);
    return cdiv(h_o * d_o, c);
  endfunction
  function automatic int conv_latency(input int d_i, input int hk, input int wk, input int act_ff);
    return d_i + 3 + clog2c(hk * wk) + act_ff;
  endfunction
  // cycle index k at which output row (o, ch) is computed
  function automatic int conv_k(input int o, input int ch, input int n_ru, input int d_o);
    return (o / n_ru) * d_o + ch;
  endfunction
  // first / last buffer read of input row (h, d) (working-memory load cycle)
  function automatic int conv_need_first(input int h, input int d, input int n_ru, input int hk,
                                         input int d_o, input int ranges);
    for (int j = 0; j < ranges; j++)
      if (h >= j * n_ru && h <= j * n_ru + n_ru + hk - 2) return j * d_o + d;
    return -1;
  endfunction
  function automatic int conv_need_last(input int h, input int d, input int n_ru, input int hk,
                                        input int d_o, input int ranges);
    int r;
    r = -1;
    for (int j = 0; j < ranges; j++)
      if (h >= j * n_ru && h <= j * n_ru + n_ru + hk - 2) r = j * d_o + d;
    return r;
  endfunction

  // Irregular-case allocation (more output slices than the row units can
  // finish completely, H_O > floor(C/D_O)*N_RU). Returns the output row
  // o*D_O + ch that row unit r computes in cycle k, or -1 if it idles. The
  // first floor(C/D_O)*D_O cycles follow the regular pattern; in the
  // remaining C mod D_O cycles the leftover slices are shared out:
  //  * single-slice units: unit i continues with leftover slice i;
  //  * complete bi-slice units: per leftover slice, as many further units as
  //    fit without running short of rows, interleaved channel by channel
  //    with the single-slice unit;
  //  * incomplete bi-slice units: one per leftover slice (lowest first) for
  //    as many slices as the rest can still cover, taking that slice's
  //    remaining rows;
  //  * multi-slice units: the remaining rows, slice by slice, C mod D_O
  //    rows per unit; any units left over idle.
  // Bi-slice units are numbered slice by slice (complete ones, then the
  // incomplete one). In the regular case the remainder cycles idle.
  function automatic int conv_alloc(input int h_o, input int d_o, input int c, input int r,
                                    input int k);
    int n_ru, rs, rem, ncompl, nrem, nb, grp, cov, lft, frees, kb, b, t, q;
    n_ru   = conv_n_ru(h_o, d_o, c);
    rs     = c / d_o;
    rem    = c - rs * d_o;
    ncompl = rs * n_ru;
    if (k < rs * d_o) begin
      q = r + n_ru * (k / d_o);
      return (q < h_o) ? q * d_o + k % d_o : -1;
    end
    if (h_o <= ncompl || rem == 0) return -1;
    t    = k - rs * d_o;
    nrem = h_o - ncompl;
    if (r < nrem) begin                                     // single-slice
      nb = imax(0, d_o / rem - 1);
      if (nrem * (1 + nb) > n_ru) nb = (n_ru - nrem) / nrem;
      return (ncompl + r) * d_o + t * (1 + nb);
    end
    nb = imax(0, d_o / rem - 1);
    if (nrem * (1 + nb) > n_ru) nb = (n_ru - nrem) / nrem;
    grp   = 1 + nb;
    cov   = rem * grp;
    lft   = d_o - cov;                                      // rows left per slice
    frees = n_ru - nrem * grp;
    kb    = 0;
    if (lft > 0)
      while (kb < nrem && kb < frees && (nrem - kb - 1) * lft <= (frees - kb - 1) * rem) kb++;
    b = nrem;
    for (int i = 0; i < nrem; i++) begin
      for (int j = 0; j < nb; j++) begin                    // complete bi-slice
        if (r == b) return (ncompl + i) * d_o + t * grp + 1 + j;
        b++;
      end
      if (i < kb) begin                                     // incomplete bi-slice
        if (r == b) return (t < lft) ? (ncompl + i) * d_o + cov + t : -1;
        b++;
      end
    end
    q = (r - b) * rem + t;                                  // multi-slice
    if (lft > 0 && q < (nrem - kb) * lft)
      return (ncompl + kb + q / lft) * d_o + cov + q % lft;
    return -1;
  endfunction
  // row unit / cycle that computes output row n = o*D_O + ch (-1 if none)
  function automatic int conv_alloc_ru(input int h_o, input int d_o, input int c, input int n);
    for (int r = 0; r < conv_n_ru(h_o, d_o, c); r++)
      for (int k = 0; k < c; k++) if (conv_alloc(h_o, d_o, c, r, k) == n) return r;
    return -1;
  endfunction
  function automatic int conv_alloc_k(input int h_o, input int d_o, input int c, input int n);
    for (int r = 0; r < conv_n_ru(h_o, d_o, c); r++)
      for (int k = 0; k < c; k++) if (conv_alloc(h_o, d_o, c, r, k) == n) return k;
    return -1;
  endfunction
  // every output row is computed exactly once
  function automatic bit conv_alloc_ok(input int h_o, input int d_o, input int c);
    int cnt;
    for (int n = 0; n < h_o * d_o; n++) begin
      cnt = 0;
      for (int r = 0; r < conv_n_ru(h_o, d_o, c); r++)
        for (int k = 0; k < c; k++) if (conv_alloc(h_o, d_o, c, r, k) == n) cnt++;
      if (cnt != 1) return 1'b0;
    end
    return 1'b1;
  endfunction
  // Irregular layer: input row (h, d) of every channel d is read from the
  // buffer in cycle k for every output row of slices h-hk+1 .. h computed
  // in cycle k. Returns the first (last = 0) or last such cycle, -1 if none.
  function automatic int conv_irr_need(input int h, input int h_o, input int d_o, input int c,
                                       input int hk, input bit last);
    int m, n;
    m = -1;
    for (int r = 0; r < conv_n_ru(h_o, d_o, c); r++)
      for (int k = 0; k < c; k++) begin
        n = conv_alloc(h_o, d_o, c, r, k);
        if (n >= 0 && h >= n / d_o && h <= n / d_o + hk - 1)
          if (m < 0 || (last ? (k > m) : (k < m))) m = k;
      end
    return m;
  endfunction
  function automatic bit conv_regular(input int h_o, input int d_o, input int c);
    return cdiv(h_o, conv_n_ru(h_o, d_o, c)) * d_o <= c;
  endfunction

  // ---------------------------------------------------------------- pool
  function automatic int pool_out_dim(input int n_in, input int p, input pad_e pad);
    return (pad == PAD_VALID) ? n_in / p : cdiv(n_in, p);
  endfunction
  // padding added in front of the first input element ('same' splits the
  // extension, extra element at the high-index edge as in Keras)
  function automatic int pool_pad_lo(input int n_in, input int p, input pad_e pad);
    return (pad == PAD_SAME) ? (pool_out_dim(n_in, p, pad) * p - n_in) / 2 : 0;
  endfunction
  function automatic int pool_n_ru(input int h_o, input int d, input int c);
    return cdiv(h_o * d, c);
  endfunction
  function automatic int pool_latency(input int hp, input int wp);
    return 1 + clog2c(hp * wp);
  endfunction

endpackage
