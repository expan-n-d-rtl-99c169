// pofx_ref_pkg -- reference arithmetic for the testbenches.
//
// Decodes a posit bit pattern with real arithmetic, the textbook way (count
// the regime run, read the exponent, add up the fraction), independently of
// the bit-level PoFx datapath, and derives the fixed-point value PoFx must
// produce from it: floor(|v| * 2^F) with the sign applied afterwards.
package pofx_ref_pkg;

  // Value of an n-bit posit (n <= 31). NaR is returned as 0.
  function automatic real posit_value(int unsigned bits, int n, int es);
    int unsigned mask = (32'd1 << n) - 1;
    int unsigned b;
    bit   sgn;
    bit   r0;
    int   idx, m, k, e;
    real  frac, w, v;
    b = bits & mask;
    if (b == 0) return 0.0;
    if (b == (32'd1 << (n - 1))) return 0.0;
    sgn = b[n-1];
    if (sgn) b = (~b + 1) & mask;
    idx = n - 2;
    r0  = b[idx];
    m   = 0;
    while (idx >= 0 && b[idx] == r0) begin m++; idx--; end
    k = r0 ? m - 1 : -m;
    idx--;                              // regime terminator
    e = 0;
    for (int t = 0; t < es; t++) begin
      e = e << 1;
      if (idx >= 0) e = e | int'(b[idx]);
      idx--;
    end
    frac = 1.0;
    w    = 0.5;
    while (idx >= 0) begin
      if (b[idx]) frac = frac + w;
      w = w / 2.0;
      idx--;
    end
    v = frac * (2.0 ** ((2 ** es) * k + e));
    return sgn ? -v : v;
  endfunction

  // Value of a normalized posit: the stored n-1 bits with the leading bit
  // replicated.
  function automatic real norm_posit_value(int unsigned bits, int n, int es);
    int unsigned full;
    full = bits & ((32'd1 << (n - 1)) - 1);
    if (full[n-2]) full = full | (32'd1 << (n - 1));
    return posit_value(full, n, es);
  endfunction

  // Expected PoFx output: truncation toward zero to F = m-1 fraction bits,
  // -1 saturated to -(2^F - 1).
  function automatic int pofx_expect(real v, int m);
    int  f = m - 1;
    real a;
    int  mag;
    a = (v < 0.0) ? -v : v;
    if (a >= 1.0) mag = (1 << f) - 1;
    else          mag = $rtoi(a * (2.0 ** f));
    return (v < 0.0) ? -mag : mag;
  endfunction

endpackage
