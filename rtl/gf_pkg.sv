// gf_pkg: shared types and constant functions for GF(2^m) arithmetic.
//
// The decoder works over GF(2^8) built from the primitive polynomial
// x^8 + x^4 + x^3 + x^2 + 1 (0x11D), with alpha = x as the primitive
// element. The field size and polynomial are this design's choice; all
// modules read them from here, so changing GF_M/GF_POLY (and the code length
// N of the modules) retargets the whole decoder.
//
// The functions are used in two ways: at elaboration, to compute constant
// powers of alpha, and inside always_comb where a general multiplication or
// inversion is needed (they then synthesise to combinational logic).
package gf_pkg;

  localparam int unsigned GF_M    = 8;
  localparam int unsigned GF_POLY = 'h11D;   // includes the x^m term
  localparam int unsigned GF_Q1   = (1 << GF_M) - 1;  // multiplicative group order

  typedef logic [GF_M-1:0] gf_t;

  // Polynomial-basis multiplication: shift-and-add with reduction.
  function automatic gf_t gf_mul_f(input gf_t a, input gf_t b);
    logic [GF_M-1:0] acc;
    logic [GF_M-1:0] sh;
    acc = '0;
    sh  = a;
    for (int i = 0; i < GF_M; i++) begin
      if (b[i]) acc = acc ^ sh;
      // sh <- sh * x mod p(x)
      if (sh[GF_M-1]) sh = (sh << 1) ^ GF_M'(GF_POLY);
      else            sh = sh << 1;
    end
    return acc;
  endfunction

  // alpha^e for any integer e (negative exponents allowed).
  function automatic gf_t gf_alpha_pow(input int e);
    int  r;
    gf_t p;
    r = e % int'(GF_Q1);
    if (r < 0) r += int'(GF_Q1);
    p = gf_t'(1);
    for (int i = 0; i < r; i++) p = gf_mul_f(p, gf_t'(2));
    return p;
  endfunction

  // Multiplicative inverse by Fermat: a^(2^m - 2) = product of a^(2^k),
  // k = 1 .. m-1. Maps 0 to 0.
  function automatic gf_t gf_inv_f(input gf_t a);
    gf_t sq;
    gf_t r;
    sq = a;
    r  = gf_t'(1);
    for (int k = 1; k < GF_M; k++) begin
      sq = gf_mul_f(sq, sq);
      r  = gf_mul_f(r, sq);
    end
    return r;
  endfunction

endpackage
