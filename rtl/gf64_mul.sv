// gf64_mul - combinational multiplier in GF(2^64).
//
// p = a * b modulo x^64 + x^4 + x^3 + x + 1. The product is the XOR of the
// shifted copies of a selected by the bits of b, each shift reduced on the
// fly (shift-and-add). It is purely combinational: the result is valid in the
// same cycle as the operands. All SSM arithmetic (share evaluation,
// interpolation, check-coefficient derivation) is done in this field, as in
// the paper; the reduction polynomial is this design's choice.
module gf64_mul
  import ssm_pkg::*;
(
  input  gf_t a,
  input  gf_t b,
  output gf_t p
);
  assign p = gf_mul(a, b);
endmodule
