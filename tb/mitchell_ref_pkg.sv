// mitchell_ref_pkg: real-number reference model of the corrected Mitchell multiplier,
// for testbenches. It follows the equations, not the hardware structure:
//   v = 2^k (1 + x);  x truncated to E fraction bits
//   x_N + x_M <  1: P = 2^(kN+kM) (1 + x_N + x_M) + 2^(kN+kM) C(x_N,  x_M)
//   x_N + x_M >= 1: P = 2^(kN+kM+1) (x_N + x_M)   + 2^(kN+kM) C(x_N', x_M')
// where C is the plain Mitchell product of the two fractions truncated to E bits and
// P is truncated to E fraction bits. Exact in double precision while the operands
// have at most about 50 significant bits.
package mitchell_ref_pkg;

  function automatic int log2_floor(input real v);
    int k = 0;
    while (v >= 2.0) begin v = v / 2.0; k++; end
    while (v <  1.0) begin v = v * 2.0; k--; end
    return k;
  endfunction

  function automatic real trunc(input real v, input int e);
    return $floor(v * (2.0 ** e)) / (2.0 ** e);
  endfunction

  // plain Mitchell product of two fractions, truncated to e bits
  function automatic real correction(input real a, input real b, input int e);
    int  ka, kb;
    real fa, fb, s, c;
    if (a == 0.0 || b == 0.0) return 0.0;
    ka = log2_floor(a);
    kb = log2_floor(b);
    fa = a / (2.0 ** ka) - 1.0;
    fb = b / (2.0 ** kb) - 1.0;
    s  = fa + fb;
    c  = (s < 1.0) ? (2.0 ** (ka + kb)) * (1.0 + s) : (2.0 ** (ka + kb + 1)) * s;
    return trunc(c, e);
  endfunction

  function automatic real product(input real n, input real m, input int e);
    int  kn, km;
    real xn, xm, s, p, c;
    if (n == 0.0 || m == 0.0) return 0.0;
    kn = log2_floor(n);
    km = log2_floor(m);
    xn = trunc(n / (2.0 ** kn) - 1.0, e);
    xm = trunc(m / (2.0 ** km) - 1.0, e);
    s  = xn + xm;
    if (s < 1.0) begin
      c = correction(xn, xm, e);
      p = 1.0 + s;
    end else begin
      c = correction(1.0 - xn, 1.0 - xm, e);
      p = 2.0 * s;
    end
    return trunc((p + c) * (2.0 ** (kn + km)), e);
  endfunction

endpackage
