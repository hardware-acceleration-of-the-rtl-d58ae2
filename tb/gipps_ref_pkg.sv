// gipps_ref_pkg -- reference arithmetic for the Gipps accelerator testbenches.
//
// Plain integer models of every step, written from the number format
// (unsigned Q8.6, truncate, saturate to all ones) rather than from the
// structure of the RTL: the multiplier and divider use the simulator's own
// * and /, the leading-one estimate uses a loop over powers of two. Also a
// real-valued model of the speed equation for a tolerance check.
package gipps_ref_pkg;

  localparam int MAXV = 16383;

  function automatic int ref_mul(input int a, input int b);
    longint p;
    p = (longint'(a) * longint'(b)) / 64;
    return (p > MAXV) ? MAXV : int'(p);
  endfunction

  function automatic bit ref_mul_ovf(input int a, input int b);
    return ((longint'(a) * longint'(b)) / 64) > MAXV;
  endfunction

  function automatic int ref_div(input int n, input int d);
    longint q;
    if (d == 0) return MAXV;
    q = (longint'(n) * 64) / d;
    return (q > MAXV) ? MAXV : int'(q);
  endfunction

  function automatic bit ref_div_ovf(input int n, input int d);
    if (d == 0) return 1;
    return ((longint'(n) * 64) / d) > MAXV;
  endfunction

  // Starting estimate: S in [2^k, 2^(k+1)) codes, k counted from the LSB.
  function automatic int ref_x0(input int s);
    int k, e;
    if (s == 0) return 1;
    k = 0;
    while ((2 ** (k + 1)) <= s) k++;
    e = k + 6;                       // exponent of sqrt in half-steps
    if (e % 2 == 0) return 2 ** (e / 2);
    return 3 * (2 ** (e / 2)) / 2;
  endfunction

  function automatic int ref_step(input int s, input int x);
    if (s == 0) return 0;
    return (x + ref_div(s, x)) / 2;
  endfunction

  function automatic int ref_sqrt(input int s);
    int x;
    x = ref_step(s, ref_x0(s));
    return ref_step(s, x);
  endfunction

  function automatic int ref_sat(input int v);
    return (v > MAXV) ? MAXV : v;
  endfunction

  // Bit-exact model of one evaluation; sat reports any saturation.
  function automatic int ref_gipps(input int a, input int t, input int vd,
                                   input int v, output bit sat);
    int r, s, x, m, omr, va;
    sat = 0;
    r   = ref_div(v, vd);       sat |= ref_div_ovf(v, vd);
    m   = ref_mul(a, t);        sat |= ref_mul_ovf(a, t);
    s   = ref_sat(r + 2);
    x   = ref_sqrt(s);
    omr = (r >= 64) ? 0 : 64 - r;
    sat |= ref_mul_ovf(m, omr);
    m   = ref_mul(m, omr);
    if (2 * m + m / 2 > MAXV) sat = 1;
    m   = ref_sat(2 * m + m / 2);
    sat |= ref_mul_ovf(m, x);
    va  = v + ref_mul(m, x);
    if (va > MAXV) sat = 1;
    return ref_sat(va);
  endfunction

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // Real-valued Gipps acceleration branch (with the clamp at V >= V*).
  // c is the constant under the root (0.025 in the model, 2/64 in the RTL).
  function automatic real real_gipps(input real a, input real t, input real vd,
                                     input real v, input real c);
    real r, f;
    r = v / vd;
    f = (r >= 1.0) ? 0.0 : (1.0 - r);
    return v + 2.5 * a * t * f * $sqrt(c + r);
  endfunction

endpackage
