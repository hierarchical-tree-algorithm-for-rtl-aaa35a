// fp_pkg: the floating-point format of the predictor and force datapaths.
//
// A word is {sign, exponent, fraction} with an implied leading one, laid out like
// IEEE-754 single precision by default (EXP_W = 8, FRAC_W = 23, bias 127), but
// simplified the way GRAPE-style pipelines are: a zero exponent means the value zero
// (no subnormals), there is no infinity or NaN (an overflowing exponent saturates at
// the largest finite value), and every operation truncates its result towards zero.
// The functions are pure combinational logic; the modules that use them place
// registers between them. fp_rsqrt computes 1/sqrt(x) by halving the exponent and
// running NEWTON_ITERS Newton-Raphson steps on the mantissa from a linear first guess.
// The number format is this design's choice: the source describes the pipelines only as
// GRAPE-6 compatible and gives no widths.
package fp_pkg;

  localparam int unsigned EXP_W  = 8;
  localparam int unsigned FRAC_W = 23;
  localparam int unsigned FP_W   = 1 + EXP_W + FRAC_W;
  localparam int unsigned BIAS   = (1 << (EXP_W - 1)) - 1;
  localparam int unsigned EMAX   = (1 << EXP_W) - 1;
  localparam int unsigned NEWTON_ITERS = 4;

  typedef logic [FP_W-1:0] fp_t;

  localparam fp_t FP_ZERO  = '0;
  localparam fp_t FP_ONE   = {1'b0, EXP_W'(BIAS),     FRAC_W'(0)};
  localparam fp_t FP_TWO   = {1'b0, EXP_W'(BIAS + 1), FRAC_W'(0)};
  localparam fp_t FP_THREE = {1'b0, EXP_W'(BIAS + 1), 1'b1, (FRAC_W-1)'(0)};

  function automatic logic fp_sign(fp_t a);
    return a[FP_W-1];
  endfunction

  function automatic logic [EXP_W-1:0] fp_exp(fp_t a);
    return a[FRAC_W +: EXP_W];
  endfunction

  function automatic fp_t fp_neg(fp_t a);
    if (a[FRAC_W +: EXP_W] == '0) return FP_ZERO;
    return {~a[FP_W-1], a[FP_W-2:0]};
  endfunction

  // Pack a sign, a signed unbiased exponent and a fraction, with flush and saturation.
  function automatic fp_t fp_pack(logic s, int e_unb, logic [FRAC_W-1:0] f);
    int eb;
    eb = e_unb + int'(BIAS);
    if (eb <= 0) return FP_ZERO;
    if (eb >= int'(EMAX)) return {s, EXP_W'(EMAX), {FRAC_W{1'b1}}};
    return {s, EXP_W'(eb), f};
  endfunction

  function automatic fp_t fp_mul(fp_t a, fp_t b);
    logic [FRAC_W:0]       ma, mb;
    logic [2*FRAC_W+1:0]   p;
    logic [FRAC_W-1:0]     f;
    int                    e;
    if (fp_exp(a) == '0 || fp_exp(b) == '0) return FP_ZERO;
    ma = {1'b1, a[FRAC_W-1:0]};
    mb = {1'b1, b[FRAC_W-1:0]};
    p  = ma * mb;
    e  = int'(fp_exp(a)) + int'(fp_exp(b)) - 2 * int'(BIAS);
    if (p[2*FRAC_W+1]) begin
      f = p[2*FRAC_W -: FRAC_W];
      e = e + 1;
    end else begin
      f = p[2*FRAC_W-1 -: FRAC_W];
    end
    return fp_pack(a[FP_W-1] ^ b[FP_W-1], e, f);
  endfunction

  // Addition with three guard bits below the fraction.
  localparam int unsigned AW = FRAC_W + 5;  // carry, hidden one, fraction, 3 guard bits

  function automatic fp_t fp_add(fp_t a, fp_t b);
    fp_t            hi, lo;
    logic [AW-1:0]  mb, ms, r;
    int unsigned    d;
    int             e;
    int             lz;
    if (fp_exp(a) == '0) return b;
    if (fp_exp(b) == '0) return a;
    if (a[FP_W-2:0] >= b[FP_W-2:0]) begin
      hi = a; lo = b;
    end else begin
      hi = b; lo = a;
    end
    d  = int'(fp_exp(hi)) - int'(fp_exp(lo));
    mb = {1'b0, 1'b1, hi[FRAC_W-1:0], 3'b000};
    ms = {1'b0, 1'b1, lo[FRAC_W-1:0], 3'b000};
    ms = (d >= AW) ? '0 : (ms >> d);
    e  = int'(fp_exp(hi)) - int'(BIAS);
    if (hi[FP_W-1] == lo[FP_W-1]) begin
      r = mb + ms;
      if (r[AW-1]) begin
        r = r >> 1;
        e = e + 1;
      end
    end else begin
      r = mb - ms;
      if (r == '0) return FP_ZERO;
      lz = 0;
      for (int i = AW - 2; i >= 0; i--) begin
        if (r[i]) break;
        lz++;
      end
      r = r << lz;
      e = e - lz;
    end
    return fp_pack(hi[FP_W-1], e, r[AW-3 -: FRAC_W]);
  endfunction

  function automatic fp_t fp_sub(fp_t a, fp_t b);
    return fp_add(a, fp_neg(b));
  endfunction

  // 1/sqrt(|a|); zero maps to zero so that a particle meets itself without effect.
  localparam int unsigned RF = FRAC_W + 8;     // fraction bits of the Newton iteration
  localparam int unsigned RW = RF + 3;         // value range [0, 8)

  function automatic fp_t fp_rsqrt(fp_t a);
    logic [RW-1:0]   m, y, t, u;
    logic [2*RW-1:0] p;
    int              eu, eh;
    if (fp_exp(a) == '0) return FP_ZERO;
    eu = int'(fp_exp(a)) - int'(BIAS);
    m  = RW'({1'b1, a[FRAC_W-1:0]}) << (RF - FRAC_W);       // mantissa in [1,2)
    if (eu % 2 != 0) begin
      m  = m << 1;                                          // [2,4), even exponent
      eu = eu - 1;
    end
    eh = eu / 2;
    // first guess: the chord 1 - (m-1)/6 through (1,1) and (4,1/2)
    y = RW'(1) << RF;
    y = y - RW'(((64'(m) - (64'd1 << RF)) * 64'd2796203) >> 24);  // 2796203 / 2^24 = 1/6
    for (int i = 0; i < int'(NEWTON_ITERS); i++) begin
      p = y * y;
      t = RW'(p >> RF);                                     // y^2
      p = m * t;
      t = RW'(p >> RF);                                     // m y^2
      u = (RW'(3) << RF) - t;
      p = y * u;
      y = RW'(p >> (RF + 1));                               // y (3 - m y^2) / 2
    end
    // y lies in (0.5, 1]
    if (y[RF]) return fp_pack(1'b0, -eh, y[RF-1 -: FRAC_W]);
    return fp_pack(1'b0, -eh - 1, y[RF-2 -: FRAC_W]);
  endfunction

endpackage
