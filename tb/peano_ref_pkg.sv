// peano_ref_pkg -- reference models for the PEANO-ViT testbenches.
//
// Plain integer models of the approximations, written as straight-line
// arithmetic from the algorithm descriptions (not from the RTL structure),
// plus the exact real-valued functions used for accuracy bounds. All
// fixed-point formats follow peano_pkg: activations Q7.8, PEANOexp values
// with 13 fraction bits, softmax results unsigned Q1.15.
package peano_ref_pkg;
  import peano_pkg::*;

  typedef struct packed {
    longint mant;
    int     e;        // alpha for the reciprocal, exponent for 1/sqrt
  } me_t;

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic int lead1(longint unsigned v);
    int k;
    k = 0;
    while (k < 63 && (v >> (k + 1)) != 0) k++;
    return k;
  endfunction

  function automatic longint recip_q(longint i);          // 1/i, RF fraction bits
    return ((longint'(1) << RF) + i / 2) / i;
  endfunction

  // MSR-approx: 1/x = mant * 2^-(RF + alpha); astar is the paper's alpha*
  function automatic me_t ref_msr(longint unsigned x, bit lmsr, int astar = ALPHA_STAR);
    longint unsigned xx, idx, rem, frac;
    longint lo, hi, mant;
    int k, alpha;
    xx    = (x == 0) ? 1 : x;
    k     = lead1(xx);
    alpha = (k <= astar) ? 0 : k - astar;
    idx   = xx >> alpha;
    lo    = recip_q(longint'(idx));
    mant  = lo;
    if (lmsr && alpha > 0) begin
      hi   = recip_q(longint'(idx) + 1);
      rem  = xx & ((longint'(1) << alpha) - 1);
      frac = (rem << 8) >> alpha;
      mant = lo - (((lo - hi) * longint'(frac)) >>> 8);
    end
    return '{mant: mant, e: alpha};
  endfunction

  // PEANOexp(x - max + 2), EF fraction bits
  function automatic longint ref_exp(int x, int xmax, bit lmsr, int astar = ALPHA_STAR);
    longint d, num, den, r;
    me_t m;
    d = longint'(x) - longint'(xmax) + 2 * 256;
    if (d < -3 * 256) return 0;
    num = 12 * 65536 + 6 * d * 256 + d * d;
    den = 12 * 65536 - 6 * d * 256 + d * d;
    m = ref_msr(longint'(den), lmsr, astar);
    r = (num * m.mant) >>> (RF + m.e - EF);
    return (r > 65535) ? 65535 : r;
  endfunction

  // 1/sqrt(var) (var with 16 fraction bits) = mant * 2^(e - 15); m is the
  // number of table bits (the log2 estimate keeps m+1 bits below the
  // leading one)
  function automatic me_t ref_rsqrt(longint unsigned var_q, int m = LN_M);
    longint unsigned vv;
    longint xf, t, u, v, mant;
    int e;
    int k, lf;
    lf   = m + 1;
    vv   = (var_q == 0) ? 1 : var_q;
    k    = lead1(vv);
    xf   = longint'(((vv << lf) >> k) & ((longint'(1) << lf) - 1));
    t    = -(longint'(k) * (longint'(1) << lf) + xf); // -(k+x), read as -(k+x)/2 with lf+1 fraction bits
    u    = t >>> (lf + 1);                            // floor of -(k+x)/2
    v    = t - u * (longint'(1) << (lf + 1));         // in [0, 2^(lf+1))
    mant = longint'($floor((2.0 ** (real'(v >> 2) / real'(longint'(1) << m))) * 32768.0 + 0.5));
    e    = int'(u) + 8;
    return '{mant: mant, e: e};
  endfunction

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // PEANO layer normalization of one row (bit-level model)
  function automatic void ref_ln_stats(int xs[$], longint inv_n,
                                       output longint avg, output longint var_q);
    longint s, sq, avgsq;
    s = 0; sq = 0;
    foreach (xs[i]) begin s += xs[i]; sq += longint'(xs[i]) * xs[i]; end
    avg   = (s * inv_n) >>> 16;                       // 16 fraction bits
    avgsq = (sq * inv_n) >>> 24;                      // 16 fraction bits
    var_q = avgsq - ((avg * avg) >>> 16);
    if (var_q < 0) var_q = 0;
  endfunction

  function automatic int ref_ln_elem(int x, longint avg, longint mant, int e, int g, int b);
    longint d, p;
    d = (longint'(x) <<< 8) - avg;
    p = d * mant * g;
    return sat16((p >>> (16 + 15 - e)) + b);
  endfunction

  // PEANO-GELU (bit-level: constants rounded as in the hardware)
  function automatic int ref_gelu(int x);
    real bp[6] = '{-3.0, -2.1, -0.75, 0.0, 0.5, 3.0};
    real s [7] = '{0.0, -0.0414, -0.0982, 0.2266, 0.6914, 1.0617, 1.0};
    real p [7] = '{0.0, -3.0, -2.1, -0.75, 0.0, 0.5, 0.0};
    real c [7] = '{0.0, 0.0, -0.0373, -0.17, 0.0, 0.3457, 0.0};
    int seg;
    longint si, pi, ci;
    seg = 0;
    for (int i = 0; i < 6; i++) if (x >= fix_of_real(bp[i], 8)) seg = i + 1;
    si = fix_of_real(s[seg], 12);
    pi = fix_of_real(p[seg], 8);
    ci = fix_of_real(c[seg], 8);
    return sat16((((longint'(x) - pi) * si) >>> 12) + ci);
  endfunction

  // exact GELU (tanh form of the paper's equation 3), real units
  function automatic real gelu_exact(real x);
    real t;
    t = 0.7978845608 * (x + 0.044715 * x * x * x);
    return 0.5 * x * (1.0 + (($exp(t) - $exp(-t)) / ($exp(t) + $exp(-t))));
  endfunction
endpackage
