// tb_free_pool - with DEPTH = 32: ready rises after 32 cycles with count 32;
// pops return BASE, BASE+1, ... in order; pushed addresses come back in FIFO
// order after the initial ones; simultaneous pop and push keep the count.
module tb_free_pool;
  import ssm_pkg::*;
  localparam int DEPTH = 32;
  localparam pba_t BASE = 29'h0ABC_0000;
  logic clk = 0, rst_n = 0, ready, pop = 0, push = 0;
  pba_t pop_addr, push_addr;
  logic [5:0] count;
  pba_t model [$];
  int checks = 0, failures = 0, cycles = 0;

  always #5 clk = ~clk;

  free_pool #(.DEPTH(DEPTH), .BASE(BASE)) dut (.clk(clk), .rst_n(rst_n), .ready(ready), .pop(pop),
    .pop_addr(pop_addr), .push(push), .push_addr(push_addr), .count(count));

  initial begin
    push_addr = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    while (!ready) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles != DEPTH || count != 6'(DEPTH)) begin failures++; $display("FAIL init %0d cycles, count %0d", cycles, count); end
    for (int i = 0; i < DEPTH; i++) model.push_back(BASE + pba_t'(i));
    for (int n = 0; n < 400; n++) begin
      automatic pba_t exp = model[0];
      automatic pba_t na  = 29'($urandom());
      checks++;
      if (pop_addr !== exp) begin failures++; $display("FAIL pop %h expected %h", pop_addr, exp); end
      pop = 1; push = 1; push_addr = na;
      void'(model.pop_front()); model.push_back(na);
      @(negedge clk); pop = 0; push = 0;
      checks++;
      if (count != 6'(DEPTH)) begin failures++; $display("FAIL count %0d", count); end
    end
    // drain 8, refill 8
    for (int i = 0; i < 8; i++) begin
      checks++;
      if (pop_addr !== model[0]) begin failures++; $display("FAIL drain"); end
      void'(model.pop_front()); pop = 1; @(negedge clk); pop = 0;
    end
    checks++; if (count != 6'(DEPTH - 8)) begin failures++; $display("FAIL count after drain %0d", count); end
    for (int i = 0; i < 8; i++) begin
      push = 1; push_addr = pba_t'(i); model.push_back(pba_t'(i)); @(negedge clk); push = 0;
    end
    checks++; if (count != 6'(DEPTH)) begin failures++; $display("FAIL count after refill"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
