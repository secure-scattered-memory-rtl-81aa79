// tb_ssm_top_full - the SSM engine at its default sizes (128 KB shares cache,
// 512-entry SSM TLB, 1024-block free pool), no parameter overridden.
// Loads the seeds, checks that a never-written line fails verification,
// writes the eight lines of two groups, reads them back, rewrites one line
// and checks that its group moved to eight new blocks and that all lines
// still read correctly, and checks the 1024-cycle latency of a read that hits
// the SSM TLB and the shares cache.
module tb_ssm_top_full;
  import ssm_pkg::*;
  import ssm_ref_pkg::*;
  localparam pba_t PT_BASE = 29'h1F00_0000;   // the engine's default

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, req_we = 0;
  line_addr_t req_line_addr = '0;
  line_t req_wdata = '0, rsp_rdata;
  logic rsp_valid, rsp_integrity_err;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  pba_t mem_req_addr;
  line_t mem_req_wdata, mem_rsp_rdata;
  logic seed_wr_en = 0;
  logic [SEED_IDX_W-1:0] seed_wr_idx = '0;
  gf_t seed_wr_seed = '0;
  ssm_events_t ev;
  int checks = 0, failures = 0, cycles = 0;
  line_t ref_mem [line_addr_t];

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  ssm_top dut (
    .clk(clk), .rst_n(rst_n), .req_valid(req_valid), .req_ready(req_ready), .req_we(req_we),
    .req_line_addr(req_line_addr), .req_wdata(req_wdata), .rsp_valid(rsp_valid), .rsp_rdata(rsp_rdata),
    .rsp_integrity_err(rsp_integrity_err), .mem_req_valid(mem_req_valid), .mem_req_ready(mem_req_ready),
    .mem_req_we(mem_req_we), .mem_req_addr(mem_req_addr), .mem_req_wdata(mem_req_wdata),
    .mem_rsp_valid(mem_rsp_valid), .mem_rsp_rdata(mem_rsp_rdata), .seed_wr_en(seed_wr_en),
    .seed_wr_idx(seed_wr_idx), .seed_wr_seed(seed_wr_seed), .events(ev));

  dram_model #(.LATENCY(40), .PT_BASE(PT_BASE)) u_dram (
    .clk(clk), .rst_n(rst_n), .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  task automatic access(bit we, line_addr_t a, line_t d, output line_t q, output bit err, output int lat);
    int t0;
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_we = we; req_line_addr = a; req_wdata = d;
    @(negedge clk); req_valid = 0; t0 = cycles;
    while (!rsp_valid) @(negedge clk);
    q = rsp_rdata; err = rsp_integrity_err; lat = cycles - t0;
  endtask

  task automatic wr(line_addr_t a);
    line_t d, q; bit e; int l;
    for (int w = 0; w < 8; w++) d[64*w +: 64] = rand64();
    access(1, a, d, q, e, l);
    ref_mem[a] = d;
  endtask

  task automatic rd_check(line_addr_t a, bit expect_ok);
    line_t q; bit e; int l;
    access(0, a, '0, q, e, l);
    checks++;
    if (expect_ok ? (e || q !== ref_mem[a]) : !e) begin
      failures++; $display("FAIL read %h err=%0d", a, e);
    end
  endtask

  initial begin
    pba_vec_t old_pt, new_pt;
    line_t q; bit e; int lat;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); seed_wr_en = 1; seed_wr_idx = 4'(i); seed_wr_seed = rand64();
    end
    @(negedge clk); seed_wr_en = 0;
    rd_check(27'h1234, 0);
    for (int i = 0; i < 8; i++) wr(27'h400 + 27'(i));
    for (int i = 0; i < 8; i++) rd_check(27'h400 + 27'(i), 1);
    old_pt = pt_unpack(u_dram.peek(PT_BASE + pba_t'(27'h402 / 4)));
    wr(27'h402);
    new_pt = pt_unpack(u_dram.peek(PT_BASE + pba_t'(27'h402 / 4)));
    for (int b = 0; b < 8; b++) for (int c = 0; c < 8; c++) begin
      checks++;
      if (new_pt[b] == old_pt[c]) begin failures++; $display("FAIL not relocated"); end
    end
    for (int i = 0; i < 8; i++) rd_check(27'h400 + 27'(i), 1);
    access(0, 27'h403, '0, q, e, lat);
    checks++;
    if (lat != 1024 || e || q !== ref_mem[27'h403]) begin failures++; $display("FAIL hit read, latency %0d", lat); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
