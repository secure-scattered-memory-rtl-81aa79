// tb_ssm_tlb - misses after reset, fill and hit with the stored block
// addresses, a conflicting group (same index, other tag) replaces the entry,
// many random fills checked against a direct-mapped model, and flush.
module tb_ssm_tlb;
  import ssm_pkg::*;
  logic clk = 0, rst_n = 0, flush = 0, wr_en = 0, hit;
  group_t lk_group, wr_group;
  pba_t lk_entry [BLOCKS_PER_GROUP];
  pba_t wr_entry [BLOCKS_PER_GROUP];
  int checks = 0, failures = 0;
  // model
  bit     mv [512];
  group_t mg [512];
  pba_t   me [512][8];

  always #5 clk = ~clk;

  ssm_tlb dut (.clk(clk), .rst_n(rst_n), .flush(flush), .lk_group(lk_group), .lk_hit(hit),
               .lk_entry(lk_entry), .wr_en(wr_en), .wr_group(wr_group), .wr_entry(wr_entry));

  task automatic fill(group_t g);
    @(negedge clk);
    wr_en = 1; wr_group = g;
    for (int b = 0; b < 8; b++) begin wr_entry[b] = 29'($urandom()); me[g % 512][b] = wr_entry[b]; end
    mv[g % 512] = 1; mg[g % 512] = g;
    @(negedge clk); wr_en = 0;
  endtask

  task automatic look(group_t g);
    bit eh;
    lk_group = g; #1;
    eh = mv[g % 512] && mg[g % 512] == g;
    checks++;
    if (hit !== eh) begin failures++; $display("FAIL hit(%h) = %0d", g, hit); end
    if (eh) for (int b = 0; b < 8; b++) begin
      checks++;
      if (lk_entry[b] !== me[g % 512][b]) begin failures++; $display("FAIL entry"); end
    end
  endtask

  initial begin
    foreach (mv[i]) mv[i] = 0;
    foreach (wr_entry[b]) wr_entry[b] = '0;
    wr_group = '0; lk_group = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    look(25'h12);
    fill(25'h12); look(25'h12);
    look(25'h12 + 25'd512);
    fill(25'h12 + 25'd512); look(25'h12); look(25'h12 + 25'd512);
    for (int n = 0; n < 2000; n++) begin
      automatic group_t g = 25'($urandom_range(0, 4095));
      if ($urandom_range(0, 1)) fill(g);
      look(g);
      look(25'($urandom_range(0, 4095)));
    end
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    foreach (mv[i]) mv[i] = 0;
    look(25'h12); look(25'h12 + 25'd512);
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
