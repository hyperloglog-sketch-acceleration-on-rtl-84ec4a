// hll_pkg: constants and helper functions shared by the HyperLogLog engine.
//
// The sketch is configured by three numbers: the hash width H (64), the
// precision p (16, giving m = 2^p buckets) and the number of parallel
// aggregation pipelines k (16). A bucket holds a rank rho in 0..H-p+1, so it
// needs ceil(log2(H-p+2)) = 6 bits for H=64, p=16, matching the register
// size of the memory-footprint table (5 bits for H=32, 6 for H=64).
//
// The fixed-point formats of the computation phase are also fixed here:
//   - the harmonic sum Z = sum 2^-M[j] is kept exactly with p+1 integer bits
//     and H+p+1 fractional bits;
//   - estimates (E, the linear-counting value and the final E*) are unsigned
//     fixed-point numbers with EST_FRAC fractional bits and EST_W bits total.
// The bias constant alpha_m is produced as an unsigned Q0.32 number by
// alpha_q32(), from the rule alpha_m = 0.7213/(1+1.079/m) for m >= 128 and the
// three tabulated values for m = 16, 32, 64.
//
// The constants are the defaults of the module parameters; a lint run on a
// module that does not use all of them reports the others as unused.
package hll_pkg;

  localparam int unsigned HASH_W   = 64;  // H
  localparam int unsigned PREC     = 16;  // p
  localparam int unsigned EST_FRAC = 16;  // fractional bits of estimates
  localparam int unsigned EST_W    = 80;  // Q64.16 estimates

  // Number of bits needed to hold the values 0..n.
  function automatic int unsigned bits_for(input int unsigned n);
    int unsigned b;
    b = 1;
    while ((64'd1 << b) <= 64'(n)) b++;
    return b;
  endfunction

  // Rank width for an H-bit hash split at p: ranks go up to H-p+1.
  function automatic int unsigned rank_w(input int unsigned h, input int unsigned p);
    return bits_for(h - p + 1);
  endfunction

  // alpha_m as Q0.32 (rounded down). For p >= 7 it evaluates
  // 0.7213 * m / (m + 1.079) in integer arithmetic, scaled by 2^32.
  function automatic logic [31:0] alpha_q32(input int unsigned p);
    logic [127:0] num;
    logic [127:0] den;
    if (p <= 4)      return 32'd2890512990;   // 0.673 * 2^32
    else if (p == 5) return 32'd2993592205;   // 0.697 * 2^32
    else if (p == 6) return 32'd3045131812;   // 0.709 * 2^32
    num = 128'd7213 * (128'd1 << p) * 128'd1000 * (128'd1 << 32);
    den = 128'd10000 * (128'd1000 * (128'd1 << p) + 128'd1079);
    return 32'(num / den);   // alpha_m < 1, so the quotient fits 32 bits
  endfunction

  // ln(2) as Q0.32 (rounded down).
  localparam logic [31:0] LN2_Q32 = 32'd2977044471;

endpackage
