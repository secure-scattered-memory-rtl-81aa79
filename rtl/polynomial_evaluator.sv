// polynomial_evaluator - share generation of SSM data segmentation.
//
// Evaluates f(x) = c0 + c1 x + ... + c9 x^9 over GF(2^64) at ten distinct,
// non-zero points and returns the ten shares (x_i, f(x_i)). x is an 8-bit
// field element (a share is 1 + 8 = 9 bytes, as in the paper). The first
// point is x_start (forced non-zero), the following points step an 8-bit
// maximal-length Galois LFSR (x^8 + x^6 + x^5 + x^4 + 1), which cannot repeat
// a value within 255 steps, so all ten points are distinct. x = 0 is never
// used because f(0) is the first data word.
//
// Horner's rule with one multiplier: acc = c9; acc = acc*x ^ c_k for
// k = 8..0, one step per cycle. Timing: coef and x_start are sampled on the
// start cycle; done pulses 90 cycles later (10 points x 9 steps) with shares
// valid until the next start. Evaluation at random points is the paper's; the
// point generator and the sequential structure are this design's choices.
module polynomial_evaluator
  import ssm_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  gf_t    coef [N_COEF],
  input  gx_t    x_start,
  output logic   busy,
  output logic   done,
  output share_t shares [T_SHARES]
);
  localparam int unsigned PW = $clog2(T_SHARES);
  localparam int unsigned KW = $clog2(N_COEF);

  gf_t           c [N_COEF];
  gf_t           acc, prod, nxt;
  gx_t           x;
  logic [PW-1:0] pt;
  logic [KW-1:0] k;

  function automatic gx_t lfsr8(gx_t s);
    return (s >> 1) ^ (s[0] ? 8'hB8 : 8'h00);
  endfunction

  gf64_mul u_mul (.a(acc), .b(gf_t'(x)), .p(prod));
  assign nxt = prod ^ c[k];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      acc  <= '0;
      x    <= 8'h01;
      pt   <= '0;
      k    <= '0;
      for (int i = 0; i < int'(N_COEF); i++) c[i] <= '0;
      for (int i = 0; i < int'(T_SHARES); i++) shares[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        for (int i = 0; i < int'(N_COEF); i++) c[i] <= coef[i];
        acc  <= coef[N_COEF-1];
        x    <= (x_start == '0) ? 8'h01 : x_start;
        pt   <= '0;
        k    <= KW'(N_COEF - 2);
        busy <= 1'b1;
      end else if (busy) begin
        if (k == '0) begin
          shares[pt] <= '{x: x, y: nxt};
          acc        <= c[N_COEF-1];
          x          <= lfsr8(x);
          k          <= KW'(N_COEF - 2);
          if (pt == PW'(T_SHARES - 1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            pt <= pt + 1'b1;
          end
        end else begin
          acc <= nxt;
          k   <= k - 1'b1;
        end
      end
    end
  end
endmodule
