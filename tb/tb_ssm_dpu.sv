// tb_ssm_dpu - round trip through the data processing unit for 100 random
// 64-byte lines (the reconstruction-accuracy experiment at degree 9): each line
// is encoded, its ten shares are placed into a group of random blocks at the
// reference slots, and decoding must return the line with the integrity check
// passed. Also: decode with one altered share, with a wrong seed and at a
// wrong offset must fail. Checks encode (90) and decode (1005) latency.
module tb_ssm_dpu;
  import ssm_pkg::*;
  import ssm_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic enc_start = 0, enc_busy, enc_done, dec_start = 0, dec_busy, dec_done, dec_ok;
  line_t enc_plain, dec_plain;
  line_addr_t enc_addr, dec_addr;
  gf_t enc_seed, dec_seed;
  gx_t xs;
  share_t enc_shares [T_SHARES];
  line_t blocks [BLOCKS_PER_GROUP];
  logic [OFF_W-1:0] off;
  int checks = 0, failures = 0, cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  ssm_dpu dut (.clk(clk), .rst_n(rst_n),
    .enc_start(enc_start), .enc_plaintext(enc_plain), .enc_line_addr(enc_addr), .enc_seed(enc_seed),
    .enc_x_start(xs), .enc_busy(enc_busy), .enc_done(enc_done), .enc_shares(enc_shares),
    .dec_start(dec_start), .dec_blocks(blocks), .dec_offset(off), .dec_line_addr(dec_addr),
    .dec_seed(dec_seed), .dec_busy(dec_busy), .dec_done(dec_done), .dec_plaintext(dec_plain), .dec_ok(dec_ok));

  task automatic encode(output int lat);
    int t0;
    @(negedge clk); enc_start = 1;
    @(negedge clk); enc_start = 0; t0 = cycles;
    while (!enc_done) @(negedge clk);
    lat = cycles - t0;
  endtask

  task automatic decode(output int lat);
    int t0;
    @(negedge clk); dec_start = 1;
    @(negedge clk); dec_start = 0; t0 = cycles;
    while (!dec_done) @(negedge clk);
    lat = cycles - t0;
  endtask

  initial begin
    int lat;
    enc_plain = '0; enc_addr = '0; enc_seed = '0; xs = 0; dec_addr = '0; dec_seed = '0; off = 0;
    foreach (blocks[b]) blocks[b] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      for (int w = 0; w < 8; w++) enc_plain[64*w +: 64] = rand64();
      enc_addr = 27'($urandom()); enc_seed = rand64(); xs = 8'($urandom());
      encode(lat);
      checks++; if (lat != 90) begin failures++; $display("FAIL encode latency %0d", lat); end
      for (int b = 0; b < 8; b++) for (int w = 0; w < 8; w++) blocks[b][64*w +: 64] = rand64();
      off = enc_addr[1:0];
      for (int m = 0; m < 10; m++) blocks[ref_blk(off, m)][72*ref_slot(off, m) +: 72] = enc_shares[m];
      dec_addr = enc_addr; dec_seed = enc_seed;
      decode(lat);
      checks++; if (lat != 1005) begin failures++; $display("FAIL decode latency %0d", lat); end
      checks++;
      if (!dec_ok || dec_plain !== enc_plain) begin failures++; $display("FAIL round trip %0d ok=%0d", n, dec_ok); end
      case (n % 3)
        0: blocks[ref_blk(off, 4)][72*ref_slot(off, 4) +: 8] ^= 8'h01;   // altered share y
        1: dec_seed = ~dec_seed;                                         // wrong seed
        default: off = off + 1'b1;                                       // wrong shares
      endcase
      decode(lat);
      checks++;
      if (dec_ok) begin failures++; $display("FAIL bad decode %0d accepted", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
