// fsc_pkg: constants and helper functions shared by the DPRT-based 2D
// convolution blocks.
//
// Word widths follow the bit-growth rules of the design: with n = ceil(log2 N),
// the forward DPRT of a B-bit image needs B+n bits (B' below), that of a C-bit
// kernel C+n bits (C'), the 1D circular convolutions B+C+3n bits (BC) and the
// inverse DPRT B+C+4n bits before normalisation (BCO = BC + ceil(log2(N+1))).
// The package also holds the exact-division helper used to normalise the
// inverse DPRT by N: since every pre-normalised sum is an exact multiple of N,
// N (odd) can be divided out by multiplying with its inverse modulo 2^W.
package fsc_pkg;

  // Number of registered levels of a binary adder tree with n inputs.
  function automatic int tree_levels(input int n);
    return (n <= 1) ? 0 : $clog2(n);
  endfunction

  // Number of operands left at level lvl of a binary adder tree of n inputs.
  function automatic int tree_count(input int n, input int lvl);
    int c;
    c = n;
    for (int i = 0; i < lvl; i++) c = (c + 1) / 2;
    return c;
  endfunction

  // Multiplicative inverse of an odd number modulo 2^64 (Newton iteration,
  // each step doubles the number of correct low-order bits: 3, 6, ..., 96).
  function automatic logic [63:0] inv_mod_pow2(input int unsigned odd_n);
    logic [63:0] x;
    logic [63:0] nn;
    nn = 64'(odd_n);
    x  = nn;
    for (int i = 0; i < 5; i++) x = x * (64'd2 - nn * x);
    return x;
  endfunction

  // Positive remainder <a>_n for a possibly negative a.
  function automatic int pmod(input int a, input int n);
    int r;
    r = a % n;
    return (r < 0) ? r + n : r;
  endfunction

endpackage
