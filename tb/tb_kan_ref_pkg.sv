// tb_kan_ref_pkg: reference arithmetic for the KAN testbenches.
//
// bval(u, S) is the uniform cubic B-spline sampled at u/S knot intervals from
// the start of its support (0 <= u < 4S), scaled so the peak 2/3 maps to 255
// and rounded to nearest: value = round(N * 765 / (12 S^3)) with
//   N = u^3                                  for 0  <= u < S
//   N = -3u^3 + 12u^2 S - 12u S^2 + 4 S^3    for S  <= u < 2S
//   N =  3u^3 - 24u^2 S + 60u S^2 - 44 S^3   for 2S <= u < 3S
//   N = (4S - u)^3                           for 3S <= u < 4S
// which is 6 S^3 times the textbook cubic basis. Integer arithmetic keeps the
// curve exactly symmetric.
package tb_kan_ref_pkg;

  function automatic int unsigned bval(input longint u, input longint s);
    longint n, a, b;
    if (u < 0 || u >= 4*s)      n = 0;
    else if (u < s)             n = u*u*u;
    else if (u < 2*s)           n = -3*u*u*u + 12*u*u*s - 12*u*s*s + 4*s*s*s;
    else if (u < 3*s)           n = 3*u*u*u - 24*u*u*s + 60*u*s*s - 44*s*s*s;
    else                        n = (4*s-u)*(4*s-u)*(4*s-u);
    a = n * 765;
    b = 12 * s*s*s;
    return int'((2*a + b) / (2*b));
  endfunction

  // Basis i of an input x (grid of g intervals, 2^ld codes each); zero
  // outside the data range [0, g*2^ld - 1].
  function automatic int unsigned bref(input int unsigned x, input int unsigned i,
                                       input int unsigned ld, input int unsigned g);
    longint s = longint'(1) << ld;
    if (x >= g * (1 << ld)) return 0;
    return bval(longint'(x) - (longint'(i) - 3) * s, s);
  endfunction

endpackage
