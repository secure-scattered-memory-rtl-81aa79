// tb_gf64_inv - checks the GF(2^64) inverter: a * inv(a) = 1 (reference
// multiplier) for 300 random operands and a few corner values, inv(0) = 0,
// and the 63-cycle latency from start to done.
module tb_gf64_inv;
  import ssm_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [63:0] a, inv;
  int checks = 0, failures = 0, cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  gf64_inv dut (.clk(clk), .rst_n(rst_n), .start(start), .a(a), .busy(busy), .done(done), .inv(inv));

  task automatic run(logic [63:0] x);
    int t0;
    @(negedge clk); a = x; start = 1;
    @(negedge clk); start = 0; t0 = cycles;
    while (!done) @(negedge clk);
    checks++;
    if (cycles - t0 != 63) begin
      failures++; $display("FAIL latency %0d", cycles - t0);
    end
    checks++;
    if (x == 0 ? (inv !== 0) : (ref_mul(x, inv) !== 64'h1)) begin
      failures++; $display("FAIL inv(%h) = %h", x, inv);
    end
  endtask

  initial begin
    a = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(64'h1); run(64'h2); run(64'h0); run(64'hFFFF_FFFF_FFFF_FFFF); run(64'h8000_0000_0000_0000);
    for (int i = 0; i < 300; i++) run(rand64());
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
