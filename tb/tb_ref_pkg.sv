// tb_ref_pkg: reference arithmetic and stimulus helpers for the testbenches.
//
// Written independently of the RTL: wide integer arithmetic on 128-bit
// values, Q9.24 words, and a Gammatone kernel generator in real arithmetic.
package tb_ref_pkg;

  localparam int W    = 34;
  localparam int FRAC = 24;
  typedef logic signed [127:0] wide_t;

  localparam longint WMAX = (64'sd1 <<< (W - 1)) - 1;
  localparam longint WMIN = -(64'sd1 <<< (W - 1));

  function automatic longint sat(wide_t v);
    if (v > wide_t'(WMAX)) return WMAX;
    if (v < wide_t'(WMIN)) return WMIN;
    return longint'(v);
  endfunction

  // (a*b) >> FRAC, floor, saturated
  function automatic longint mul_q(longint a, longint b);
    wide_t p;
    p = wide_t'(a) * wide_t'(b);
    return sat(p >>> FRAC);
  endfunction

  function automatic longint mag(longint v);
    if (v == WMIN) return WMAX;
    return (v < 0) ? -v : v;
  endfunction

  function automatic longint to_q(real r);
    return sat(wide_t'($rtoi(r * real'(1 << FRAC) + ((r >= 0.0) ? 0.5 : -0.5))));
  endfunction

  // Gammatone kernel of `len` samples at 16 kHz, centre frequency given by an
  // ERB-spaced index k of n_k (100 Hz .. 6 kHz), peak placed near the start,
  // normalised to unit energy: g(t) = t^3 exp(-2 pi b t) cos(2 pi f t).
  function automatic void gammatone(int k, int n_k, int len, ref real g[]);
    real fs, f, erb, b, t, e;
    real lo, hi, el, eh;
    fs = 16000.0;
    el = 21.4 * $log10(1.0 + 0.00437 * 100.0);
    eh = 21.4 * $log10(1.0 + 0.00437 * 6000.0);
    lo = el + (eh - el) * real'(k) / real'((n_k > 1) ? n_k - 1 : 1);
    f  = (10.0 ** (lo / 21.4) - 1.0) / 0.00437;
    erb = 24.7 + 0.108 * f;
    b  = 1.019 * erb;
    g  = new[len];
    e  = 0.0;
    for (int n = 0; n < len; n++) begin
      t = real'(n) / fs;
      g[n] = (t ** 3) * $exp(-2.0 * 3.14159265358979 * b * t) * $cos(2.0 * 3.14159265358979 * f * t);
      e += g[n] * g[n];
    end
    hi = $sqrt(e);
    for (int n = 0; n < len; n++) g[n] = (hi > 0.0) ? g[n] / hi : 0.0;
  endfunction

  typedef struct {
    int     m;
    int     tau;
    longint s;
  } ref_code_t;

  // Matching-pursuit reference of one segment: up to k codes, stopping
  // early when |s| < thr (that code is not returned). x is updated in place
  // to the final residual. Kernels are phi[m*len + j].
  function automatic void mp_encode(ref longint x[], ref longint phi[], input int n_k, input int len,
                                    input int step, input int k, input longint thr,
                                    output ref_code_t codes[$], output bit by_thr);
    int half; half = len / 2;
    codes = {}; by_thr = 0;
    for (int it = 0; it < k; it++) begin
      longint best; int bm, bt; longint bs; bit fast;
      longint mx, mp;
      mx = 0; mp = 0;
      foreach (x[i]) if (mag(x[i]) > mx) mx = mag(x[i]);
      foreach (phi[i]) if (mag(phi[i]) > mp) mp = mag(phi[i]);
      fast = (mx < (64'sd1 <<< 30)) && (mp < (64'sd1 <<< 30)) &&
             ($clog2(mx + 1) + $clog2(mp + 1) + $clog2(len + 1) < 62);
      best = -1; bm = 0; bt = 0; bs = 0;
      for (int m = 0; m < n_k; m++)
        for (int tau = 0; tau <= 2 * half; tau += step) begin
          int d, lo, hi; wide_t acc; longint c;
          d = tau - half; lo = (d > 0) ? d : 0; hi = (d < 0) ? len - 1 + d : len - 1;
          if (fast) begin
            // every product and partial sum fits in 64 bits
            longint a64; a64 = 0;
            for (int n = lo; n <= hi; n++) a64 += x[n] * phi[m * len + n - d];
            acc = wide_t'(a64);
          end else begin
            acc = 0;
            for (int n = lo; n <= hi; n++) acc += wide_t'(x[n]) * wide_t'(phi[m * len + n - d]);
          end
          c = sat(acc >>> FRAC);
          if (mag(c) > best) begin best = mag(c); bm = m; bt = tau; bs = c; end
        end
      if (best < thr) begin by_thr = 1; return; end
      codes.push_back('{m: bm, tau: bt, s: bs});
      if (it == k - 1) return;
      begin
        int d; d = bt - half;
        for (int n = 0; n < len; n++)
          if (n - d >= 0 && n - d < len) x[n] = sat(wide_t'(x[n]) - wide_t'(mul_q(bs, phi[bm * len + n - d])));
      end
    end
  endfunction

  // Output level (0..2) of an intensity: nearest centre intensity.
  function automatic int ref_level(longint s);
    real r, c[3], best; int lv;
    c[0] = 0.0065; c[1] = 0.4115; c[2] = 25.8744;
    r = real'(mag(s)) / real'(1 << FRAC);
    lv = 0; best = (r > c[0]) ? r - c[0] : c[0] - r;
    for (int j = 1; j < 3; j++) begin
      real d; d = (r > c[j]) ? r - c[j] : c[j] - r;
      if (d < best) begin best = d; lv = j; end
    end
    return lv;
  endfunction

endpackage
