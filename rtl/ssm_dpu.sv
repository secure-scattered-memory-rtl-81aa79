// ssm_dpu - SSM data processing unit: segmentation and reconstruction of one
// 64-byte line.
//
// Encode (write path): coefficient_generator forms f(x) from the plaintext,
// the seed and the line address; polynomial_evaluator evaluates it at ten
// random points. enc_start samples all enc_* inputs; enc_done pulses 90
// cycles later with enc_shares valid until the next encode.
//
// Decode (read path): the reconstructor picks the line's ten shares out of
// the eight share blocks of its group, lagrange_interpolator recovers the
// coefficients, and the reconstructor turns them into the plaintext and the
// integrity verdict. dec_start samples the shares; dec_line_addr and dec_seed
// must stay stable until dec_done, which pulses about a thousand cycles later
// (see lagrange_interpolator) with dec_plaintext/dec_ok valid until the next
// decode. Encode and decode have separate multipliers and may overlap.
// The four sub-blocks are the ones the paper lists for its data processing
// unit; the wiring between them follows its block diagram.
module ssm_dpu
  import ssm_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // encode
  input  logic             enc_start,
  input  line_t            enc_plaintext,
  input  line_addr_t       enc_line_addr,
  input  gf_t              enc_seed,
  input  gx_t              enc_x_start,
  output logic             enc_busy,
  output logic             enc_done,
  output share_t           enc_shares [T_SHARES],
  // decode
  input  logic             dec_start,
  input  line_t            dec_blocks [BLOCKS_PER_GROUP],
  input  logic [OFF_W-1:0] dec_offset,
  input  line_addr_t       dec_line_addr,
  input  gf_t              dec_seed,
  output logic             dec_busy,
  output logic             dec_done,
  output line_t            dec_plaintext,
  output logic             dec_ok
);
  gf_t    enc_coef [N_COEF];
  gf_t    dec_coef [N_COEF];
  share_t dec_pairs [T_SHARES];

  coefficient_generator u_cgen (
    .plaintext(enc_plaintext), .line_addr(enc_line_addr), .seed(enc_seed), .coef(enc_coef));

  polynomial_evaluator u_eval (
    .clk(clk), .rst_n(rst_n), .start(enc_start), .coef(enc_coef), .x_start(enc_x_start),
    .busy(enc_busy), .done(enc_done), .shares(enc_shares));

  lagrange_interpolator u_lag (
    .clk(clk), .rst_n(rst_n), .start(dec_start), .shares(dec_pairs),
    .busy(dec_busy), .done(dec_done), .coef(dec_coef));

  reconstructor u_rec (
    .group_blocks(dec_blocks), .offset(dec_offset), .pairs(dec_pairs),
    .coef(dec_coef), .line_addr(dec_line_addr), .seed(dec_seed),
    .plaintext(dec_plaintext), .integrity_ok(dec_ok));
endmodule
