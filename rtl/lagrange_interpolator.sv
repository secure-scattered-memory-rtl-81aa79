// lagrange_interpolator - polynomial reconstruction of SSM.
//
// Recovers the ten coefficients of f(x) from ten shares (x_i, y_i) by Lagrange
// interpolation over GF(2^64), where subtraction is XOR:
//   M(x)   = prod_j (x + x_j)                  (monic, degree 10)
//   q_i(x) = M(x) / (x + x_i)                  (synthetic division)
//   D_i    = prod_{j != i} (x_i + x_j),  w_i = y_i / D_i
//   f(x)   = sum_i w_i q_i(x)
// which is Lagrange's formula expanded into coefficient form. One GF
// multiplier is time-shared by all steps; D_i is inverted by gf64_inv.
//
// Timing: shares are sampled on the start cycle. Building M takes 65 cycles;
// each of the ten points then takes 9 (divide) + 10 (denominator) + 64
// (inverse) + 1 (weight) + 10 (accumulate) = 94 cycles, so done pulses
// 65 + 10*94 = 1005 clock edges after start (checked by the testbench). coef stays valid
// until the next start. The x_i must be distinct; otherwise the result is
// meaningless (the integrity check downstream then fails). The paper gives
// the formula; the sequential schedule is this design's own, and it is far
// slower than the 40-cycle reconstruction latency the paper assumes in its
// system simulation.
module lagrange_interpolator
  import ssm_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  share_t shares [T_SHARES],
  output logic   busy,
  output logic   done,
  output gf_t    coef [N_COEF]
);
  localparam int unsigned T  = T_SHARES;
  localparam int unsigned IW = $clog2(T + 2);

  typedef enum logic [2:0] {S_IDLE, S_BUILD, S_DIV, S_DEN, S_INV, S_WGT, S_ACC} state_e;
  state_e st;

  gf_t           xs [T];
  gf_t           ys [T];
  gf_t           mp [T+1];   // master polynomial M, mp[T] = 1
  gf_t           q  [T];
  gf_t           d, w;
  logic [IW-1:0] i, j, k;

  gf_t  ma, mb, prod;
  logic inv_start, inv_done;
  gf_t  inv_val;

  gf64_mul u_mul (.a(ma), .b(mb), .p(prod));
  gf64_inv u_inv (.clk(clk), .rst_n(rst_n), .start(inv_start), .a(prod),
                  .busy(), .done(inv_done), .inv(inv_val));

  // operand selection for the shared multiplier
  always_comb begin
    ma = '0;
    mb = '0;
    unique case (st)
      S_BUILD: begin ma = xs[j]; mb = mp[k]; end
      S_DIV:   begin ma = xs[i]; mb = q[k];  end
      S_DEN:   begin ma = d;     mb = (j == i) ? gf_t'(1) : (xs[i] ^ xs[j]); end
      S_WGT:   begin ma = ys[i]; mb = inv_val; end
      S_ACC:   begin ma = w;     mb = q[k];  end
      default: ;
    endcase
  end

  // the last denominator product goes straight into the inverter
  assign inv_start = (st == S_DEN) && (j == IW'(T - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      busy <= 1'b0;
      done <= 1'b0;
      i <= '0; j <= '0; k <= '0;
      d <= '0; w <= '0;
      for (int n = 0; n < int'(T); n++) begin
        xs[n] <= '0; ys[n] <= '0; q[n] <= '0; coef[n] <= '0;
      end
      for (int n = 0; n <= int'(T); n++) mp[n] <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          for (int n = 0; n < int'(T); n++) begin
            xs[n]   <= gf_t'(shares[n].x);
            ys[n]   <= shares[n].y;
            coef[n] <= '0;
          end
          for (int n = 0; n <= int'(T); n++) mp[n] <= (n == 0) ? gf_t'(1) : '0;
          j    <= '0;
          k    <= IW'(1);
          busy <= 1'b1;
          st   <= S_BUILD;
        end
        // M(x) <- M(x) * (x + x_j), coefficients updated from the top down
        S_BUILD: begin
          mp[k] <= ((k == '0) ? '0 : mp[k - 1'b1]) ^ prod;
          if (k == '0) begin
            if (j == IW'(T - 1)) begin
              i  <= '0;
              st <= S_DIV;
              q[T-1] <= mp[T];
              k  <= IW'(T - 1);
            end else begin
              j <= j + 1'b1;
              k <= j + IW'(2);
            end
          end else begin
            k <= k - 1'b1;
          end
        end
        // q_{k-1} = M_k + x_i q_k
        S_DIV: begin
          q[k - 1'b1] <= mp[k] ^ prod;
          if (k == IW'(1)) begin
            st <= S_DEN;
            d  <= gf_t'(1);
            j  <= '0;
          end else begin
            k <= k - 1'b1;
          end
        end
        S_DEN: begin
          d <= prod;
          if (j == IW'(T - 1)) st <= S_INV;
          else                 j  <= j + 1'b1;
        end
        S_INV: if (inv_done) st <= S_WGT;
        S_WGT: begin
          w  <= prod;
          k  <= '0;
          st <= S_ACC;
        end
        S_ACC: begin
          coef[k] <= coef[k] ^ prod;
          if (k == IW'(T - 1)) begin
            if (i == IW'(T - 1)) begin
              st   <= S_IDLE;
              busy <= 1'b0;
              done <= 1'b1;
            end else begin
              i      <= i + 1'b1;
              q[T-1] <= mp[T];
              k      <= IW'(T - 1);
              st     <= S_DIV;
            end
          end else begin
            k <= k + 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
