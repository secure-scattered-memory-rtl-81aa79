// tb_lagrange_interpolator - for 40 random polynomials the reference model
// evaluates f at ten distinct random points (x from 1..255); the interpolator
// must return all ten coefficients exactly, with done 1005 cycles after
// start. One extra case alters one share and expects a different result.
module tb_lagrange_interpolator;
  import ssm_pkg::*;
  import ssm_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  share_t shares [T_SHARES];
  gf_t coef [N_COEF];
  int checks = 0, failures = 0, cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  lagrange_interpolator dut (.clk(clk), .rst_n(rst_n), .start(start), .shares(shares),
                             .busy(busy), .done(done), .coef(coef));

  task automatic make_points(logic [63:0] c [10]);
    logic [7:0] xv [10];
    for (int i = 0; i < 10; i++) begin
      bit ok;
      do begin
        ok = 1;
        xv[i] = 8'($urandom_range(1, 255));
        for (int j = 0; j < i; j++) if (xv[j] == xv[i]) ok = 0;
      end while (!ok);
      shares[i] = '{x: xv[i], y: ref_eval(c, 64'(xv[i]))};
    end
  endtask

  task automatic run(output int lat);
    int t0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0; t0 = cycles;
    while (!done) @(negedge clk);
    lat = cycles - t0;
  endtask

  initial begin
    logic [63:0] c [10];
    int lat;
    foreach (shares[i]) shares[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      for (int k = 0; k < 10; k++) c[k] = rand64();
      make_points(c);
      run(lat);
      checks++;
      if (lat != 1005) begin failures++; $display("FAIL latency %0d", lat); end
      for (int k = 0; k < 10; k++) begin
        checks++;
        if (coef[k] !== c[k]) begin failures++; $display("FAIL c%0d = %h expected %h", k, coef[k], c[k]); end
      end
    end
    for (int k = 0; k < 10; k++) c[k] = rand64();
    make_points(c);
    shares[3].y ^= 64'h100;
    run(lat);
    checks++;
    if (coef[0] === c[0] && coef[9] === c[9]) begin failures++; $display("FAIL tamper not visible"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
