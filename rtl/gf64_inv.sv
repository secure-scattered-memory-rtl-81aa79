// gf64_inv - sequential inverse in GF(2^64).
//
// Computes inv = a^(2^64 - 2) = a^-1 (Fermat), used for the division in
// Lagrange interpolation. The exponent is 63 ones followed by a zero, so the
// unit starts from r = a and performs 62 steps r = r^2 * a and a last step
// r = r^2: one step per clock cycle with two chained multipliers.
//
// Interface: pulse start with a valid; busy is high while computing; done
// pulses for one cycle 63 cycles after start, with inv valid from then until
// the next start. a = 0 yields 0. The paper only requires division to be
// defined in the field; the method is this design's choice.
module gf64_inv
  import ssm_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  gf_t  a,
  output logic busy,
  output logic done,
  output gf_t  inv
);
  gf_t        base, r, sq, sqm;
  logic [5:0] step;

  gf64_mul u_sq  (.a(r),  .b(r),    .p(sq));
  gf64_mul u_sqm (.a(sq), .b(base), .p(sqm));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base <= '0;
      r    <= '0;
      step <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        base <= a;
        r    <= a;
        step <= 6'd0;
        busy <= 1'b1;
      end else if (busy) begin
        if (step == 6'd62) begin
          r    <= sq;
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          r    <= sqm;
          step <= step + 6'd1;
        end
      end
    end
  end

  assign inv = r;
endmodule
