// cds_ref_pkg: reference model of the CDS pricing, written in the simulator's own double
// arithmetic (real) and independent of the RTL, used by the testbenches to work out the
// expected results. It follows the same model as the engine:
//   time points t_k = k/f up to the maturity m (the last one clipped to m),
//   H(t)  = sum_j h_j * max(0, min(t, T_j) - T_{j-1})   (T_{-1} = 0, last rate extended),
//   Q(t)  = exp(-H(t)),  r(t) linear in the interest curve (flat outside it),
//   D(t)  = exp(-r(t) t),
//   pay  += D Q dt,  pof += D (Qprev - Q)(1 - R),  acr += D (Qprev - Q) dt / 2,
//   spread = 1e4 * pof / (pay + acr).
// It also provides the curves the testbenches load, generated from closed formulas.
package cds_ref_pkg;

  real hz_t [1024], hz_v [1024], ir_t [1024], ir_v [1024];
  int  hz_n, ir_n;

  // Hazard curve: n points evenly spaced up to `span` years, rates between 0.5% and
  // 4.5% following a slow sine. Interest curve: n points from 0.5 years, spaced
  // `span`/n, rates between 1% and 5% rising with time.
  function automatic void make_curves(int n, real span);
    hz_n = n; ir_n = n;
    for (int j = 0; j < n; j++) begin
      hz_t[j] = span * real'(j + 1) / real'(n);
      hz_v[j] = 0.025 + 0.02 * $sin(real'(j) * 0.37);
      ir_t[j] = 0.5 + span * real'(j) / real'(n);
      ir_v[j] = 0.01 + 0.04 * real'(j) / real'(n) + 0.002 * $cos(real'(j) * 1.3);
    end
  endfunction

  function automatic real hazard(real t);
    real s, lo, hi;
    s = 0.0;
    for (int j = 0; j < hz_n; j++) begin
      lo = (j == 0) ? 0.0 : hz_t[j-1];
      hi = (j == hz_n - 1 || t < hz_t[j]) ? t : hz_t[j];
      if (lo < hi) s += hz_v[j] * (hi - lo);
    end
    return s;
  endfunction

  function automatic real rate(real t);
    int lo, hi;
    lo = -1; hi = -1;
    for (int j = 0; j < ir_n; j++) begin
      if (!(t < ir_t[j])) lo = j;
      else if (hi < 0) hi = j;
    end
    if (lo < 0) return ir_v[hi];
    if (hi < 0) return ir_v[lo];
    return ir_v[lo] + (ir_v[hi] - ir_v[lo]) * (t - ir_t[lo]) / (ir_t[hi] - ir_t[lo]);
  endfunction

  function automatic int n_points(real m, int f);
    int k;
    k = 1;
    while (real'(k) / real'(f) < m) k++;
    return k;
  endfunction

  function automatic real spread(real m, int f, real rec);
    real t, tprev, q, qprev, d, pay, pof, acr, ddq;
    bit last;
    tprev = 0.0; qprev = 1.0; pay = 0.0; pof = 0.0; acr = 0.0;
    for (int k = 1; ; k++) begin
      t = real'(k) / real'(f);
      last = !(t < m);
      if (last) t = m;
      q = $exp(-hazard(t));
      d = $exp(-rate(t) * t);
      ddq = d * (qprev - q);
      pay += d * q * (t - tprev);
      pof += ddq * (1.0 - rec);
      acr += ddq * (t - tprev) * 0.5;
      if (last) break;
      tprev = t; qprev = q;
    end
    return 1.0e4 * pof / (pay + acr);
  endfunction

  // Curve words: four (time, rate) pairs per 512-bit word, pair k in bits
  // [128k+127:128k], time in the upper half. Hazard words first, then interest words.
  function automatic int n_cfg_words();
    return (hz_n + 3) / 4 + (ir_n + 3) / 4;
  endfunction

  function automatic logic [511:0] cfg_word(int w);
    logic [511:0] x;
    int hw, j;
    x = '0;
    hw = (hz_n + 3) / 4;
    for (int k = 0; k < 4; k++) begin
      if (w < hw) begin
        j = 4 * w + k;
        if (j < hz_n) x[128*k +: 128] = {$realtobits(hz_t[j]), $realtobits(hz_v[j])};
      end else begin
        j = 4 * (w - hw) + k;
        if (j < ir_n) x[128*k +: 128] = {$realtobits(ir_t[j]), $realtobits(ir_v[j])};
      end
    end
    return x;
  endfunction

  // One option in slot s (0 or 1) of a 512-bit option word.
  function automatic logic [255:0] opt_slot(real m, int f, real rec);
    return {64'd0, $realtobits(rec), 32'd0, 32'(f), $realtobits(m)};
  endfunction

  function automatic bit close(real got, real want, real tol);
    real d;
    d = got - want;
    if (d < 0) d = -d;
    if (want < 0) want = -want;
    return d <= tol * want + 1e-300;
  endfunction

endpackage
