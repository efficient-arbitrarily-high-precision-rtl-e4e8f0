// flma_ref_pkg: reference arithmetic for the testbenches, in double
// precision, independent of the RTL.  A dual-base value {zero, sign, a, b}
// stands for +-2^a * e^(b / 2^F); its natural log magnitude a*ln2 + b/2^F is
// what "log ulp" errors are measured on.
package flma_ref_pkg;

  localparam real LN2 = 0.6931471805599453;

  function automatic real lns_real(input bit zero, input bit sign, input int a,
                                   input longint unsigned b, input int fb);
    real v;
    if (zero) return 0.0;
    v = (2.0 ** a) * $exp(real'(b) / (2.0 ** fb));
    return sign ? -v : v;
  endfunction

  // natural log of the magnitude, in units of 2^-fb (log ulps)
  function automatic real lns_lnmag(input int a, input longint unsigned b, input int fb);
    return real'(a) * LN2 * (2.0 ** fb) + real'(b);
  endfunction

  function automatic real real_lnmag(input real v, input int fb);
    if (v < 0.0) v = -v;
    return $ln(v) * (2.0 ** fb);
  endfunction

  function automatic real flt_real(input bit zero, input bit sign, input int e,
                                   input longint unsigned frac, input int mw);
    real v;
    if (zero) return 0.0;
    v = (1.0 + real'(frac) / (2.0 ** mw)) * (2.0 ** e);
    return sign ? -v : v;
  endfunction

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // largest valid b at fb bits: one below the rounding of ln 2
  function automatic longint unsigned bmax(input int fb);
    return longint'($floor(LN2 * (2.0 ** fb) + 0.5)) - 1;
  endfunction

endpackage
