// tb_polynomial_evaluator - for 100 random polynomials checks that the ten
// shares have distinct non-zero x, that each y equals f(x) computed by the
// reference (power sums, not Horner), that the first x is x_start (or 1 for
// x_start = 0), and that done comes 90 cycles after start.
module tb_polynomial_evaluator;
  import ssm_pkg::*;
  import ssm_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  gf_t coef [N_COEF];
  gx_t xs;
  share_t shares [T_SHARES];
  int checks = 0, failures = 0, cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  polynomial_evaluator dut (.clk(clk), .rst_n(rst_n), .start(start), .coef(coef), .x_start(xs),
                            .busy(busy), .done(done), .shares(shares));

  initial begin
    logic [63:0] c [10];
    int t0;
    foreach (coef[k]) coef[k] = '0;
    xs = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      for (int k = 0; k < 10; k++) begin c[k] = rand64(); coef[k] = c[k]; end
      xs = (n == 0) ? 8'h00 : 8'($urandom());
      @(negedge clk); start = 1;
      @(negedge clk); start = 0; t0 = cycles;
      foreach (coef[k]) coef[k] = rand64();   // must have been sampled at start
      while (!done) @(negedge clk);
      checks++;
      if (cycles - t0 != 90) begin failures++; $display("FAIL latency %0d", cycles - t0); end
      checks++;
      if (shares[0].x !== ((xs == 0) ? 8'h01 : xs)) begin failures++; $display("FAIL first x %h", shares[0].x); end
      for (int i = 0; i < 10; i++) begin
        checks++;
        if (shares[i].x == 0) begin failures++; $display("FAIL x=0"); end
        for (int j = 0; j < i; j++) if (shares[i].x == shares[j].x) begin failures++; $display("FAIL dup x"); end
        checks++;
        if (shares[i].y !== ref_eval(c, 64'(shares[i].x))) begin
          failures++; $display("FAIL f(%h) = %h expected %h", shares[i].x, shares[i].y, ref_eval(c, 64'(shares[i].x)));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
