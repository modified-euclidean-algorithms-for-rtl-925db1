// gf_mul: combinational GF(2^m) multiplier, p = a * b.
//
// The field is the one defined in gf_pkg (GF(2^8), polynomial 0x11D). The
// product is formed by the usual shift-and-reduce scheme: the partial
// products a*x^i are reduced modulo the field polynomial as they are formed
// and those selected by the bits of b are added (XOR). Purely
// combinational, no clock. This is the general multiplier that every
// key-equation cell uses four times.
module gf_mul
  import gf_pkg::*;
(
  input  gf_t a,
  input  gf_t b,
  output gf_t p
);

  always_comb p = gf_mul_f(a, b);

endmodule
