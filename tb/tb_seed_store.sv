// tb_seed_store - checks the seed table: zero after reset, every entry
// written with a random seed and read back, and overwriting one entry
// leaves the others unchanged.
module tb_seed_store;
  import ssm_ref_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [3:0] wr_idx = 0, rd_idx = 0;
  logic [63:0] wr_seed = 0, rd_seed;
  logic [63:0] model [16];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  seed_store dut (.clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_idx(wr_idx), .wr_seed(wr_seed),
                  .rd_idx(rd_idx), .rd_seed(rd_seed));

  task automatic chk_all();
    for (int i = 0; i < 16; i++) begin
      rd_idx = 4'(i); #1;
      checks++;
      if (rd_seed !== model[i]) begin failures++; $display("FAIL seed %0d = %h, expected %h", i, rd_seed, model[i]); end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    foreach (model[i]) model[i] = '0;
    chk_all();
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); wr_en = 1; wr_idx = 4'(i); wr_seed = rand64(); model[i] = wr_seed;
    end
    @(negedge clk); wr_en = 0;
    chk_all();
    @(negedge clk); wr_en = 1; wr_idx = 4'd5; wr_seed = 64'hAAAA_5555_AAAA_5555; model[5] = wr_seed;
    @(negedge clk); wr_en = 0;
    chk_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
