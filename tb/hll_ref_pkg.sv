// hll_ref_pkg: reference model of HyperLogLog for the testbenches.
//
// Plain sequential code, written independently of the RTL: MurmurHash3
// (x64_128, first word) of a 32-bit item, the rank rho(w), alpha_m and the
// estimate formulas in real arithmetic, including linear counting.
package hll_ref_pkg;

  function automatic longint unsigned rotl64(longint unsigned x, int r);
    return (x << r) | (x >> (64 - r));
  endfunction

  function automatic longint unsigned fmix64(longint unsigned k);
    k = k ^ (k >> 33);
    k = k * 64'hff51afd7ed558ccd;
    k = k ^ (k >> 33);
    k = k * 64'hc4ceb9fe1a85ec53;
    k = k ^ (k >> 33);
    return k;
  endfunction

  function automatic longint unsigned murmur3_64(int unsigned v, longint unsigned seed = 0);
    longint unsigned h1, h2, k1;
    h1 = seed;
    h2 = seed;
    k1 = longint'(v) & 64'hffff_ffff;
    k1 = k1 * 64'h87c37b91114253d5;
    k1 = rotl64(k1, 31);
    k1 = k1 * 64'h4cf5ad432745937f;
    h1 = h1 ^ k1;
    h1 = h1 ^ 64'd4;
    h2 = h2 ^ 64'd4;
    h1 = h1 + h2;
    h2 = h2 + h1;
    h1 = fmix64(h1);
    h2 = fmix64(h2);
    h1 = h1 + h2;
    return h1;
  endfunction

  // bucket index: the first p bits of the 64-bit hash
  function automatic int unsigned index_of(longint unsigned x, int p);
    return int'(x >> (64 - p));
  endfunction

  // rho(w) for w = the low 64-p bits of x: leading zeros of w plus one
  function automatic int unsigned rank_of(longint unsigned x, int p);
    int unsigned r;
    r = 1;
    for (int b = 63 - p; b >= 0; b--) begin
      if ((x >> b) & 1) break;
      r++;
    end
    return r;
  endfunction

  function automatic real alpha(int p);
    real m;
    m = 2.0 ** p;
    if (p == 4) return 0.673;
    if (p == 5) return 0.697;
    if (p == 6) return 0.709;
    return 0.7213 / (1.0 + 1.079 / m);
  endfunction

  // raw estimate from the harmonic sum z = sum 2^-M[j]
  function automatic real raw_estimate(int p, real z);
    real m;
    m = 2.0 ** p;
    return alpha(p) * m * m / z;
  endfunction

  function automatic real linear_counting(int p, int v);
    real m;
    m = 2.0 ** p;
    return m * $ln(m / v);
  endfunction

  // small-range corrected estimate (no large-range correction for H = 64)
  function automatic real final_estimate(int p, real e, int v);
    if (e <= 2.5 * (2.0 ** p) && v != 0) return linear_counting(p, v);
    return e;
  endfunction

  // Q.16 fixed point to real
  function automatic real q16_to_real(logic [79:0] q);
    real r;
    r = 0.0;
    for (int i = 79; i >= 0; i--) r = r * 2.0 + (q[i] ? 1.0 : 0.0);
    return r / 65536.0;
  endfunction

  function automatic bit close(real a, real b, real rel, real abs_tol);
    real d;
    d = (a > b) ? a - b : b - a;
    return d <= abs_tol + rel * ((b < 0) ? -b : b);
  endfunction

endpackage
