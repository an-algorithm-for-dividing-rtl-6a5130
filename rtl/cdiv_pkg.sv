// cdiv_pkg: shared constants of the three-multiplier complex divider.
//
// The divider computes y = a / x for complex a and x given as pairs of
// signed fixed-point integers. The algorithm fixes no number format, so the
// word widths below are this design's own choice: 16-bit two's-complement
// operand parts and 16 fraction bits in the quotient. Every module takes its
// widths as parameters whose defaults come from here; the functions give the
// widths of the internal words that follow from them without loss.
package cdiv_pkg;

  // Width of one real operand part (ar, ai, xr, xi), two's complement.
  parameter int unsigned CDIV_W = 16;
  // Fraction bits of the quotient parts yr, yi.
  parameter int unsigned CDIV_FRAC = 16;

  // Coefficients d0 = ar - ai, d1 = -(ar + ai), d2 = ai need two extra bits:
  // -(ar + ai) reaches +2^W when ar = ai = -2^(W-1).
  function automatic int unsigned coef_w(int unsigned w);
    return w + 2;
  endfunction

  // Pre-added divisor terms xr, xi, xr + xi need one extra bit.
  function automatic int unsigned xterm_w(int unsigned w);
    return w + 1;
  endfunction

  // Products of a coefficient and a divisor term, and the post-adder sums.
  function automatic int unsigned prod_w(int unsigned w);
    return coef_w(w) + xterm_w(w);
  endfunction

  // R = xr^2 + xi^2 is non-negative and below 2^(2W).
  function automatic int unsigned norm_w(int unsigned w);
    return 2 * w;
  endfunction

  // Quotient magnitude bits: |y| <= |a| / |x| < 2^W for any x other than 0,
  // so W integer bits and FRAC fraction bits hold every quotient part.
  function automatic int unsigned quot_w(int unsigned w, int unsigned frac);
    return w + frac;
  endfunction

endpackage
