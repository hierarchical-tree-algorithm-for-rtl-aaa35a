// fp_ref_pkg: testbench helpers for the fp_pkg number format. Conversions go through
// IEEE double so that reference values are computed independently of the RTL's
// arithmetic functions.
package fp_ref_pkg;
  import fp_pkg::*;

  function automatic fp_t to_fp(real r);
    logic [63:0] b;
    int          e;
    if (r == 0.0) return FP_ZERO;
    b = $realtobits(r);
    e = int'(b[62:52]) - 1023 + int'(BIAS);
    if (e <= 0) return FP_ZERO;
    return {b[63], EXP_W'(e), b[51 -: FRAC_W]};
  endfunction

  function automatic real from_fp(fp_t a);
    logic [63:0] b;
    if (a[FRAC_W +: EXP_W] == '0) return 0.0;
    b = {a[FP_W-1], 11'(int'(a[FRAC_W +: EXP_W]) - int'(BIAS) + 1023),
         a[FRAC_W-1:0], (52 - FRAC_W)'(0)};
    return $bitstoreal(b);
  endfunction

  function automatic real fabs(real r);
    return (r < 0.0) ? -r : r;
  endfunction

  // uniform in [lo, hi)
  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * (real'($urandom) / 4294967296.0);
  endfunction

  // |got - want| <= tol * scale
  function automatic bit close(real got, real want, real scale, real tol);
    return fabs(got - want) <= tol * scale;
  endfunction
endpackage
