// cds_pkg: types, constants and IEEE-754 double-precision arithmetic shared by the
// CDS (credit default swap) dataflow engine.
//
// Every calculation of the engine is double precision, as in the engine this RTL
// describes. The arithmetic here is written as combinational functions so that each
// dataflow stage can call it; the only operator modelled with its real pipeline depth
// is the adder used for accumulation (fp64_add_pipe, seven cycles), because the
// engine's accumulation scheme is built around that latency.
//
// Arithmetic conventions (this design's own choices): round to nearest even;
// subnormal inputs and results are flushed to zero; overflow gives infinity; NaN is
// not generated or propagated (the CDS model never produces one from valid data).
// fp_exp uses Cody-Waite range reduction by ln2 and a degree-13 Taylor polynomial
// evaluated by Horner's rule; its error is a few units in the last place.
package cds_pkg;

  typedef logic [63:0] f64_t;

  localparam f64_t F64_ZERO  = 64'h0000000000000000;
  localparam f64_t F64_ONE   = 64'h3ff0000000000000;
  localparam f64_t F64_HALF  = 64'h3fe0000000000000;
  localparam f64_t F64_INF   = 64'h7ff0000000000000;
  localparam f64_t F64_1E4   = 64'h40c3880000000000;  // 10000: spread in basis points
  localparam f64_t F64_INVLN2 = 64'h3ff71547652b82fe;
  localparam f64_t F64_LN2_HI = 64'h3fe62e42fee00000;
  localparam f64_t F64_LN2_LO = 64'h3dea39ef35793c76;

  // Width of one external memory word (HBM access width).
  localparam int unsigned MEM_W = 512;

  // One entry of a rate curve: a point in time (years) and the hazard or interest rate.
  typedef struct packed {
    f64_t t;
    f64_t v;
  } rate_pt_t;

  // One option (CDS contract) to be priced.
  typedef struct packed {
    f64_t        maturity;   // years
    logic [31:0] frequency;  // premium payments per year
    f64_t        recovery;   // recovery rate, fraction of notional
  } option_t;

  // One time point of an option, as streamed between the dataflow stages.
  typedef struct packed {
    f64_t t;         // time point
    f64_t dt;        // distance to the previous time point
    f64_t recovery;  // recovery rate of the option
    logic last;      // last time point of the option
  } tpoint_t;

  // Time point with its survival probabilities.
  typedef struct packed {
    tpoint_t tp;
    f64_t    q;      // survival probability up to tp.t
    f64_t    qprev;  // survival probability up to the previous time point
  } prob_t;

  // A per-time-point term to be accumulated, with the option boundary.
  typedef struct packed {
    f64_t v;
    logic last;
  } term_t;

  // Integrated hazard of a time point.
  typedef struct packed {
    tpoint_t tp;
    f64_t    h;      // integral of the hazard rate from 0 to tp.t
  } hz_res_t;

  // Interpolated interest rate of a time point.
  typedef struct packed {
    prob_t p;
    f64_t  r;        // interest rate at p.tp.t
  } ir_res_t;

  // ---------------------------------------------------------------- helpers
  function automatic f64_t fp_neg(f64_t a);
    return {~a[63], a[62:0]};
  endfunction

  function automatic logic fp_is_zero(f64_t a);
    return a[62:52] == 11'd0;
  endfunction

  // a < b
  function automatic logic fp_lt(f64_t a, f64_t b);
    if (fp_is_zero(a) && fp_is_zero(b)) return 1'b0;
    if (a[63] != b[63]) return a[63];
    if (!a[63]) return a[62:0] < b[62:0];
    return a[62:0] > b[62:0];
  endfunction

  // Round a normalised 53-bit significand with guard bit g and sticky s, then pack.
  function automatic f64_t fp_pack(logic sgn, logic signed [13:0] e, logic [52:0] m,
                                   logic g, logic s);
    logic [53:0] mr;
    logic signed [13:0] er;
    mr = {1'b0, m} + 54'((g && (s || m[0])) ? 1 : 0);
    er = e;
    if (mr[53]) begin
      mr = mr >> 1;
      er = er + 14'sd1;
    end
    if (er <= 0) return {sgn, 63'd0};
    if (er >= 14'sd2047) return {sgn, F64_INF[62:0]};
    return {sgn, er[10:0], mr[51:0]};
  endfunction

  // ---------------------------------------------------------------- add
  function automatic f64_t fp_add(f64_t a, f64_t b);
    f64_t x, y;
    logic [55:0] mx, my, lost;
    logic [56:0] s;
    logic [10:0] d;
    logic signed [13:0] e;
    logic sgn, stk;
    int lz;
    if (fp_is_zero(b)) return fp_is_zero(a) ? {a[63] & b[63], 63'd0} : a;
    if (fp_is_zero(a)) return b;
    if (a[62:0] >= b[62:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    d  = x[62:52] - y[62:52];
    mx = {1'b1, x[51:0], 3'b000};
    my = {1'b1, y[51:0], 3'b000};
    if (d > 11'd55) begin
      my = 56'd1;                       // only the sticky bit survives
    end else begin
      lost = my & ((56'd1 << d) - 56'd1);
      my   = my >> d;
      my[0] = my[0] | (|lost);
    end
    sgn = x[63];
    if (x[63] == y[63]) s = {1'b0, mx} + {1'b0, my};
    else                s = {1'b0, mx} - {1'b0, my};
    if (s == 57'd0) return F64_ZERO;
    e = 14'(x[62:52]);
    if (s[56]) begin
      stk = s[0];
      s = s >> 1;
      s[0] = s[0] | stk;
      e = e + 14'sd1;
    end else begin
      lz = 0;
      for (int i = 55; i >= 0; i--) begin
        if (s[i]) break;
        lz++;
      end
      s = s << lz;
      e = e - 14'(lz);
    end
    return fp_pack(sgn, e, s[55:3], s[2], s[1] | s[0]);
  endfunction

  function automatic f64_t fp_sub(f64_t a, f64_t b);
    return fp_add(a, fp_neg(b));
  endfunction

  // ---------------------------------------------------------------- multiply
  function automatic f64_t fp_mul(f64_t a, f64_t b);
    logic [105:0] p;
    logic signed [13:0] e;
    logic sgn;
    sgn = a[63] ^ b[63];
    if (fp_is_zero(a) || fp_is_zero(b)) return {sgn, 63'd0};
    p = {1'b1, a[51:0]} * {1'b1, b[51:0]};
    e = 14'(a[62:52]) + 14'(b[62:52]) - 14'sd1023;
    if (p[105]) return fp_pack(sgn, e + 14'sd1, p[105:53], p[52], |p[51:0]);
    return fp_pack(sgn, e, p[104:52], p[51], |p[50:0]);
  endfunction

  // ---------------------------------------------------------------- divide
  function automatic f64_t fp_div(f64_t a, f64_t b);
    logic [108:0] num, q, r;
    logic [52:0] ma, mb;
    logic signed [13:0] e;
    logic sgn;
    sgn = a[63] ^ b[63];
    if (fp_is_zero(b)) return {sgn, F64_INF[62:0]};
    if (fp_is_zero(a)) return {sgn, 63'd0};
    ma = {1'b1, a[51:0]};
    mb = {1'b1, b[51:0]};
    e  = 14'(a[62:52]) - 14'(b[62:52]) + 14'sd1023;
    if (ma < mb) begin
      num = {55'd0, ma, 1'b0} << 54;   // 2*ma/mb is in [1,2)
      e = e - 14'sd1;
    end else begin
      num = {56'd0, ma} << 54;
    end
    q = num / {56'd0, mb};             // 55-bit quotient in [2^54, 2^55)
    r = num % {56'd0, mb};
    return fp_pack(sgn, e, q[54:2], q[1], q[0] | (r != 109'd0));
  endfunction

  // ---------------------------------------------------------------- conversions
  function automatic f64_t fp_from_uint(logic [31:0] k);
    int p;
    logic [52:0] m;
    if (k == 32'd0) return F64_ZERO;
    p = 0;
    for (int i = 0; i < 32; i++) if (k[i]) p = i;
    m = 53'(k) << (52 - p);
    return {1'b0, 11'(1023 + p), m[51:0]};
  endfunction

  function automatic f64_t fp_from_int(logic signed [31:0] k);
    f64_t r;
    r = fp_from_uint(k < 0 ? 32'(-k) : 32'(k));
    if (k < 0) r[63] = 1'b1;
    return r;
  endfunction

  // Round to the nearest integer (halves away from zero); |a| must be below 2^30.
  function automatic logic signed [31:0] fp_round_int(f64_t a);
    logic [52:0] m;
    logic [84:0] v;
    int ex, sh;
    logic signed [31:0] mag;
    ex = int'(a[62:52]) - 1023;
    if (ex < -1) return 32'sd0;
    m  = {1'b1, a[51:0]};
    sh = 52 - ex;                                // 23 .. 53
    v  = (85'(m) + (85'd1 << (sh - 1))) >> sh;
    mag = 32'(v);
    return a[63] ? -mag : mag;
  endfunction

  // ---------------------------------------------------------------- exponential
  function automatic f64_t fp_exp(f64_t x);
    f64_t coef [14];
    f64_t kf, r, p;
    logic signed [31:0] k;
    logic signed [13:0] e;
    coef = '{64'h3ff0000000000000, 64'h3ff0000000000000, 64'h3fe0000000000000,
             64'h3fc5555555555555, 64'h3fa5555555555555, 64'h3f81111111111111,
             64'h3f56c16c16c16c17, 64'h3f2a01a01a01a01a, 64'h3efa01a01a01a01a,
             64'h3ec71de3a556c734, 64'h3e927e4fb7789f5c, 64'h3e5ae64567f544e4,
             64'h3e21eed8eff8d898, 64'h3de6124613a86d09};   // 1/n!, n = 0..13
    if (fp_is_zero(x)) return F64_ONE;
    if (x[62:52] >= 11'd1032) return x[63] ? F64_ZERO : F64_INF;  // |x| >= 512
    k  = fp_round_int(fp_mul(x, F64_INVLN2));
    kf = fp_from_int(k);
    r  = fp_sub(x, fp_mul(kf, F64_LN2_HI));
    r  = fp_sub(r, fp_mul(kf, F64_LN2_LO));
    p  = coef[13];
    for (int n = 12; n >= 0; n--) p = fp_add(fp_mul(p, r), coef[n]);
    e = 14'(p[62:52]) + 14'(k);
    if (e <= 0) return F64_ZERO;
    if (e >= 14'sd2047) return F64_INF;
    return {1'b0, e[10:0], p[51:0]};
  endfunction

endpackage
