// reconstructor - share extraction and result check of SSM data reconstruction.
//
// Two combinational halves used around the Lagrange interpolator:
//  * extraction: from the eight share blocks of a group (56 shares) it picks
//    the ten shares that belong to the line at group offset `offset`, using
//    the same placement as the write path (ssm_pkg::share_pos). The other 46
//    shares fetched with them are ignored: they belong to neighbouring lines
//    or are filler.
//  * check: from the interpolated coefficients it forms the plaintext
//    (c0..c7, c0 in the low word) and the integrity verdict: the padding
//    coefficient c8 must be zero and c9 must equal the check coefficient
//    derived from the on-chip seed and the line address. Any altered, swapped
//    or stale-location share gives a different polynomial and fails this.
// The paper assigns pair extraction to the reconstructor in its text and
// feeds it the interpolated coefficients in its block diagram; this module
// does both. The check-coefficient derivation is this design's choice.
// The plaintext output is the coefficients c0..c7 unchanged (the data words
// are the coefficients), so those bits are wires by design.
module reconstructor
  import ssm_pkg::*;
(
  input  line_t             group_blocks [BLOCKS_PER_GROUP],
  input  logic [OFF_W-1:0]  offset,
  output share_t            pairs [T_SHARES],
  input  gf_t               coef [N_COEF],
  input  line_addr_t        line_addr,
  input  gf_t               seed,
  output line_t             plaintext,
  output logic              integrity_ok
);
  gf_t expect_chk;

  gf64_mul u_chk (.a(seed), .b(gf_t'({line_addr, 1'b1})), .p(expect_chk));

  always_comb begin
    slot_pos_t p;
    for (int m = 0; m < int'(T_SHARES); m++) begin
      p        = share_pos(offset, m);
      pairs[m] = share_t'(group_blocks[p.blk][SHARE_W*p.slot +: SHARE_W]);
    end
  end

  always_comb begin
    for (int w = 0; w < int'(DATA_WORDS); w++) plaintext[COEF_W*w +: COEF_W] = coef[w];
    integrity_ok = (coef[PAD_IDX] == '0) && (coef[CHK_IDX] == expect_chk);
  end
endmodule
