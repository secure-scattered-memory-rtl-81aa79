// tb_ssm_cache_sweep - shares-cache size sweep of the SSM engine on an
// irregular access trace.
//
// Six engines, identical except for the shares-cache size (4 KB, 16 KB,
// 64 KB, 128 KB, 512 KB and 1 MB, all 8-way), each with its own DRAM model, run
// the same request trace side by side. The TLB and free pool are at their
// defaults. The trace first writes REGION consecutive lines, then issues
// N_OPS requests that behave like a depth-first graph walk: half continue to
// the next line, half jump to a random line of the region; one request in
// eight is a write. Expected read data comes from a reference memory
// computed before the run, so every read is checked (data and integrity
// flag) in every engine.
//
// For each size the bench prints the shares-cache hit rate during the trace
// and the DRAM accesses per request (share blocks, page walks, page-table
// writes). Checks: all reads correct; every engine sees hits and the 4 KB
// one also misses and evictions; the hit rate never drops by more than one point as the cache
// grows and the 1 MB cache hits more often than the 4 KB one; the DRAM
// traffic per request does not grow with the cache size. The trace is this
// bench's own stand-in for a graph workload; its sizes keep the run short.
module tb_ssm_cache_sweep;
  import ssm_pkg::*;
  import ssm_ref_pkg::*;

  localparam int unsigned NCFG   = 6;
  localparam int unsigned REGION = 4096;   // lines (1024 groups)
  localparam int unsigned N_OPS  = 1000;
  localparam int unsigned SIZES [NCFG] = '{4096, 16384, 65536, 131072, 524288, 1048576};
  localparam pba_t PT_BASE = 29'h1F00_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // trace, built before the engines start
  bit         op_we   [N_OPS];
  line_addr_t op_addr [N_OPS];
  line_t      op_data [N_OPS];
  line_t      op_exp  [N_OPS];
  gf_t        seeds   [NUM_SEEDS];
  bit         go = 0;

  // per-engine results
  int  sc_hit [NCFG], sc_miss [NCFG], sc_evict [NCFG], mem_acc [NCFG], rd_fail [NCFG];
  bit  done   [NCFG];

  for (genvar k = 0; k < NCFG; k++) begin : g_cfg
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
    bit measuring = 0;

    ssm_top #(.CACHE_BYTES(SIZES[k])) dut (
      .clk(clk), .rst_n(rst_n), .req_valid(req_valid), .req_ready(req_ready), .req_we(req_we),
      .req_line_addr(req_line_addr), .req_wdata(req_wdata), .rsp_valid(rsp_valid), .rsp_rdata(rsp_rdata),
      .rsp_integrity_err(rsp_integrity_err), .mem_req_valid(mem_req_valid), .mem_req_ready(mem_req_ready),
      .mem_req_we(mem_req_we), .mem_req_addr(mem_req_addr), .mem_req_wdata(mem_req_wdata),
      .mem_rsp_valid(mem_rsp_valid), .mem_rsp_rdata(mem_rsp_rdata), .seed_wr_en(seed_wr_en),
      .seed_wr_idx(seed_wr_idx), .seed_wr_seed(seed_wr_seed), .events(ev));

    dram_model #(.LATENCY(40), .PT_BASE(PT_BASE)) u_dram (
      .clk(clk), .rst_n(rst_n), .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
      .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

    always @(posedge clk) if (measuring) begin
      if (ev.sc_hit)   sc_hit[k]++;
      if (ev.sc_miss)  sc_miss[k]++;
      if (ev.sc_evict) sc_evict[k]++;
      if (mem_req_valid && mem_req_ready) mem_acc[k]++;
    end

    task automatic access(bit we, line_addr_t a, line_t d, output line_t q, output bit err);
      @(negedge clk);
      while (!req_ready) @(negedge clk);
      req_valid = 1; req_we = we; req_line_addr = a; req_wdata = d;
      @(negedge clk); req_valid = 0;
      while (!rsp_valid) @(negedge clk);
      q = rsp_rdata; err = rsp_integrity_err;
    endtask

    initial begin
      line_t q; bit e;
      sc_hit[k] = 0; sc_miss[k] = 0; sc_evict[k] = 0; mem_acc[k] = 0; rd_fail[k] = 0; done[k] = 0;
      wait (go);
      for (int i = 0; i < int'(NUM_SEEDS); i++) begin
        @(negedge clk); seed_wr_en = 1; seed_wr_idx = SEED_IDX_W'(i); seed_wr_seed = seeds[i];
      end
      @(negedge clk); seed_wr_en = 0;
      // warm-up: write the whole region once, in order (line i gets data i)
      for (int i = 0; i < int'(REGION); i++) access(1, line_addr_t'(i), {16{32'(i) ^ 32'hA5A5_0000}}, q, e);
      measuring = 1;
      for (int i = 0; i < int'(N_OPS); i++) begin
        access(op_we[i], op_addr[i], op_data[i], q, e);
        if (!op_we[i] && (e || q !== op_exp[i])) rd_fail[k]++;
      end
      measuring = 0;
      done[k] = 1;
    end
  end

  initial begin
    line_t ref_mem [line_addr_t];
    int unsigned cur;
    for (int i = 0; i < int'(NUM_SEEDS); i++) seeds[i] = rand64();
    for (int i = 0; i < int'(REGION); i++) ref_mem[line_addr_t'(i)] = {16{32'(i) ^ 32'hA5A5_0000}};
    cur = 0;
    for (int i = 0; i < int'(N_OPS); i++) begin
      cur = ($urandom_range(1) == 0) ? (cur + 1) % REGION : $urandom_range(REGION - 1);
      op_addr[i] = line_addr_t'(cur);
      op_we[i]   = ($urandom_range(7) == 0);
      for (int w = 0; w < 8; w++) op_data[i][64*w +: 64] = rand64();
      if (op_we[i]) ref_mem[op_addr[i]] = op_data[i];
      op_exp[i] = ref_mem[op_addr[i]];
    end
    repeat (3) @(negedge clk); rst_n = 1;
    // let the free pools initialise (one entry per cycle)
    repeat (1100) @(negedge clk);
    go = 1;
    for (int k = 0; k < int'(NCFG); k++) wait (done[k]);

    for (int k = 0; k < int'(NCFG); k++) begin
      $display("shares cache %4d KB: hit rate %0d.%0d %% (%0d hits, %0d misses, %0d evictions), %0d.%02d DRAM accesses per request, %0d bad reads",
               SIZES[k] / 1024, 1000 * sc_hit[k] / (sc_hit[k] + sc_miss[k]) / 10,
               1000 * sc_hit[k] / (sc_hit[k] + sc_miss[k]) % 10, sc_hit[k], sc_miss[k], sc_evict[k],
               mem_acc[k] / N_OPS, 100 * mem_acc[k] / N_OPS % 100, rd_fail[k]);
      checks++; if (rd_fail[k] != 0) failures++;
      checks++; if (sc_hit[k] == 0) begin failures++; $display("FAIL cache %0d: no hit", k); end
      if (k > 0) begin
        // hit rates in per mille
        checks++;
        if (1000 * sc_hit[k] / (sc_hit[k] + sc_miss[k]) + 10 < 1000 * sc_hit[k-1] / (sc_hit[k-1] + sc_miss[k-1])) begin
          failures++; $display("FAIL hit rate drops from %0d KB to %0d KB", SIZES[k-1] / 1024, SIZES[k] / 1024);
        end
        checks++;
        if (mem_acc[k] > mem_acc[k-1] + mem_acc[k-1] / 100) begin
          failures++; $display("FAIL DRAM traffic grows from %0d KB to %0d KB", SIZES[k-1] / 1024, SIZES[k] / 1024);
        end
      end
    end
    checks++; if (sc_miss[0] == 0 || sc_evict[0] == 0) begin failures++; $display("FAIL 4 KB cache never missed or evicted"); end
    checks++;
    if (sc_hit[NCFG-1] * (sc_hit[0] + sc_miss[0]) <= sc_hit[0] * (sc_hit[NCFG-1] + sc_miss[NCFG-1])) begin
      failures++; $display("FAIL 1 MB cache does not beat 4 KB");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
