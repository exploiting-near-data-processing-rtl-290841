// natsa_ref_pkg -- reference arithmetic for the NATSA testbenches.
//
// Recomputes the accelerator's fixed-point results with 64-bit integers,
// written independently of the RTL: products truncated toward minus infinity,
// the DCU quotient truncated toward zero and saturated, and the squared
// z-normalised distance d = 2*(m - (q - m*mu_i*mu_j)/(sigma_i*sigma_j)).
// Also provides a plain dot product and a real-valued distance for sanity checks.
package natsa_ref_pkg;

  localparam int FRAC = 16;
  localparam longint FMAX = 64'h7FFF_FFFF;

  function automatic int rmul(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    return int'(p >>> FRAC);
  endfunction

  function automatic int rdist(int q, int m, int mu_i, int mu_j, int s_i, int s_j);
    int den, num;
    longint quot;
    den = rmul(s_i, s_j);
    if (den <= 0) return int'(FMAX);
    num  = q - rmul(mu_i, mu_j) * m;
    quot = (longint'(num) * 65536) / longint'(den);
    if (quot > FMAX)  quot = FMAX;
    if (quot < -FMAX) quot = -FMAX;
    return ((m * 65536) - int'(quot)) * 2;
  endfunction

  // Fixed-point value of a real number, rounded to nearest.
  function automatic int to_fix(real r);
    return int'($rtoi(r * 65536.0 + ((r >= 0) ? 0.5 : -0.5)));
  endfunction

endpackage
