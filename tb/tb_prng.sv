// tb_prng - checks the xorshift64 generator against a software model:
// reset state, 1000 steps, hold when next is low, reseed and the zero-seed
// guard.
module tb_prng;
  logic clk = 0, rst_n = 0, reseed = 0, next = 0;
  logic [63:0] seed_in = 0, rnd, model;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  prng dut (.clk(clk), .rst_n(rst_n), .reseed(reseed), .seed_in(seed_in), .next(next), .rnd(rnd));

  function automatic logic [63:0] step(logic [63:0] s);
    s = s ^ (s << 13);
    s = s ^ (s >> 7);
    s = s ^ (s << 17);
    return s;
  endfunction

  task automatic chk();
    checks++;
    if (rnd !== model) begin failures++; $display("FAIL rnd %h expected %h", rnd, model); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    model = 64'h9E37_79B9_7F4A_7C15; chk();
    next = 1;
    for (int i = 0; i < 1000; i++) begin @(negedge clk); model = step(model); chk(); end
    next = 0;
    repeat (5) @(negedge clk); chk();
    reseed = 1; seed_in = 64'h0123_4567_89AB_CDEF; @(negedge clk); reseed = 0;
    model = 64'h0123_4567_89AB_CDEF; chk();
    next = 1; repeat (10) begin @(negedge clk); model = step(model); chk(); end
    next = 0; reseed = 1; seed_in = 0; @(negedge clk); reseed = 0;
    model = 64'h9E37_79B9_7F4A_7C15; chk();
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
