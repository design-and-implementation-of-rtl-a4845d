// lref_model_pkg: bit-true reference model of the LRef filter cascade, for the
// testbenches. Written in direct form (y[n] = sum_t h_t x[n - M t]), not in the
// transposed form of the RTL, so it checks the structure rather than mirroring it.
//
// Each stage rounds half up to the sample word length (16 bits unless given)
// and saturates, as the RTL does. Coefficients are Q1.(cw-1), 16-bit unless
// given. For
// Filter I every input sample carries the bandwidth bank that was active when
// it entered, because a transposed-form filter keeps the products already in
// its delay line across a coefficient switch.
package lref_model_pkg;

  // Round half up to wl bits (removing the Q1.(cw-1) coefficient scaling),
  // saturate.
  function automatic longint round_sat(longint a, int wl = 16, int cw = 16);
    longint r, hi, lo;
    r  = (a + (64'sd1 <<< (cw - 2))) >>> (cw - 1);
    hi = (64'sd1 <<< (wl - 1)) - 1;
    lo = -(64'sd1 <<< (wl - 1));
    if (r > hi) return hi;
    if (r < lo) return lo;
    return r;
  endfunction

  class lref_model;
    // coefficient store image, signed
    longint words [67];
    // per-stage input histories and, for Filter I, the bank per sample
    longint x1 [$], x2 [$], x3 [$];
    int     bank [$];
    int     n_sat;
    int     wl;     // sample word length of the modelled filter
    int     cw;     // coefficient word length

    function new(int wl_ = 16, int cw_ = 16);
      n_sat = 0;
      wl = wl_;
      cw = cw_;
    endfunction

    // h for stage s (1,2,3), tap t of the full prototype, bank b.
    function longint tap(int s, int t, int b);
      int order, k;
      order = (s == 3) ? 14 : 26;
      k = (t <= order / 2) ? t : order - t;
      if (s == 1) return words[14 * b + k];
      if (k == order / 2) return 64'sd1 <<< (cw - 2);
      if (k % 2 != 0) return 0;
      return (s == 2) ? words[56 + k / 2] : words[63 + k / 2];
    endfunction

    function longint stage(int s, ref longint x [$]);
      int order, m, n;
      longint acc;
      order = (s == 3) ? 14 : 26;
      m = (s == 1) ? 4 : (s == 2) ? 2 : 1;
      n = x.size() - 1;
      acc = 0;
      for (int t = 0; t <= order; t++)
        if (n - m * t >= 0) acc += tap(s, t, (s == 1) ? bank[n - m * t] : 0) * x[n - m * t];
      return round_sat(acc, wl, cw);
    endfunction

    // One sample through the cascade; returns the output that the filter
    // produces for this input sample.
    function longint push(longint v, int b);
      longint y;
      x1.push_back(v);
      bank.push_back(b);
      y = stage(1, x1);
      x2.push_back(y);
      y = stage(2, x2);
      x3.push_back(y);
      y = stage(3, x3);
      if (y == (64'sd1 <<< (wl - 1)) - 1 || y == -(64'sd1 <<< (wl - 1))) n_sat++;
      return y;
    endfunction
  endclass

endpackage
