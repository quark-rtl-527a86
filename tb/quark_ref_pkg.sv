// quark_ref_pkg: reference models for the testbenches.
//
// Integer models of the shift-and-add exp and ln approximations written
// directly from their defining equations (ceiling split, Q.12 polynomials,
// ln2 ~ 0.1011b), used to check the RTL bit for bit, plus a few real-valued
// helpers.  Nothing here is synthesizable.
package quark_ref_pkg;

  // exp(x), x with in_f fractional bits, result with out_f bits, saturated
  function automatic longint ref_exp(longint x, int in_f, int out_w, int out_f);
    longint xs, qi, qf, qfc, p, r, maxv;
    int sh;
    xs   = x + (x >>> 1) - (x >>> 4);
    qi   = -((-xs) >>> in_f);                  // ceiling
    qf   = xs - qi * (64'sd1 << in_f);
    qfc  = qf * (64'sd1 << (12 - in_f));
    p    = ((702 * qfc * qfc) >>> 24) + ((2734 * qfc) >>> 12) + 4088;
    sh   = int'(qi) + out_f - 12;
    maxv = (64'sd1 <<< out_w) - 1;
    if (sh >= 0) begin
      if (sh > out_w) return maxv;
      r = p <<< sh;
      return (r > maxv) ? maxv : r;
    end
    if (-sh > 13) return 0;
    return p >>> (-sh);
  endfunction

  // ln(x), x unsigned with in_f fractional bits, result with out_f bits
  function automatic longint ref_ln(longint x, int in_f, int out_f, int out_w = 24);
    longint qn, lg, l2, ln;
    int msb;
    if (x <= 0) return -(64'sd1 <<< (out_w - 1));
    msb = 0;
    for (int i = 0; i < 63; i++) if (x >= (64'sd1 << i)) msb = i;
    if (msb >= 12) qn = x >>> (msb - 12);
    else           qn = x <<< (12 - msb);
    lg = -((1380 * qn * qn) >>> 24) + ((8172 * qn) >>> 12) - 6758;
    l2 = longint'(msb - in_f) * 4096 + lg;
    ln = l2 - (l2 >>> 2) - (l2 >>> 4);
    return ln >>> (12 - out_f);
  endfunction

  // a / b through the log domain, both with f fractional bits
  function automatic longint ref_div(longint a, longint b, int f, int out_w, int out_f);
    if (a == 0) return 0;
    if (b == 0) return (64'sd1 <<< out_w) - 1;
    return ref_exp(ref_ln(a, f, 12) - ref_ln(b, f, 12), 12, out_w, out_f);
  endfunction

  function automatic real absr(real v);
    return (v < 0.0) ? -v : v;
  endfunction

endpackage
