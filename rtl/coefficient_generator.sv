// coefficient_generator - polynomial generation of SSM data segmentation.
//
// Forms the ten GF(2^64) coefficients of f(x) for one 64-byte line:
//   c0..c7 = the eight 8-byte data words (c0 = plaintext[63:0]),
//   c8     = 0, the zero padding coefficient,
//   c9     = a1 = seed * (2*line_addr + 1), the check coefficient.
// The data words as low-order coefficients, the zero padding and one
// seed-derived coefficient at x^9 follow the paper's example. How a1 is derived
// from the seed is not given there: multiplying by an odd function of the line
// address is this design's choice, so that shares moved to another line's
// page-table entry fail verification even under the same seed.
// Combinational (one GF multiplier). c0..c7 are the data words themselves and c8 is
// the constant zero: those outputs are wires and a constant by design; the
// only logic is the check coefficient c9.
module coefficient_generator
  import ssm_pkg::*;
(
  input  line_t      plaintext,
  input  line_addr_t line_addr,
  input  gf_t        seed,
  output gf_t        coef [N_COEF]
);
  gf_t check;

  gf64_mul u_chk (.a(seed), .b(gf_t'({line_addr, 1'b1})), .p(check));

  always_comb begin
    for (int w = 0; w < int'(DATA_WORDS); w++) coef[w] = plaintext[COEF_W*w +: COEF_W];
    coef[PAD_IDX] = '0;
    coef[CHK_IDX] = check;
  end
endmodule
