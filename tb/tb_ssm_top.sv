// tb_ssm_top - end-to-end test of the SSM engine with a behavioural DRAM,
// at reduced sizes (4 KB shares cache, 16-entry SSM TLB, 64-block free pool)
// so that every mechanism occurs often in a short run.
//
// A reference memory holds the expected content of every line written.
// Phases: load seeds; reads of never-written lines must fail the integrity
// check; writes and reads of 48 lines in 12 groups; 300 random reads/writes
// over 64 lines plus far-away lines (TLB conflicts, cache evictions); a
// relocation check (after a write the group's page-table entry in DRAM names
// eight new blocks, none of the old ones); a replay attack (old share blocks
// written back to their old locations, the read still returns the new data);
// a tamper attack (one share altered in DRAM, after eviction from the shares
// cache the read reports an integrity error); latency of a read that hits
// both TLB and shares cache. Each mechanism - TLB hit, TLB miss/page walk,
// shares-cache hit, miss and eviction, relocation, integrity failure - is
// counted and must occur.
module tb_ssm_top;
  import ssm_pkg::*;
  import ssm_ref_pkg::*;
  localparam pba_t PT_BASE = 29'h1F00_0000;

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
  int n_tlb_hit = 0, n_tlb_miss = 0, n_sc_hit = 0, n_sc_miss = 0, n_evict = 0, n_reloc = 0, n_integ = 0;
  line_t ref_mem [line_addr_t];

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (ev.tlb_hit)    n_tlb_hit++;
    if (ev.tlb_miss)   n_tlb_miss++;
    if (ev.sc_hit)     n_sc_hit++;
    if (ev.sc_miss)    n_sc_miss++;
    if (ev.sc_evict)   n_evict++;
    if (ev.relocate)   n_reloc++;
    if (ev.integ_fail) n_integ++;
  end

  ssm_top #(.PT_BASE(PT_BASE), .POOL_DEPTH(64), .TLB_ENTRIES(16), .CACHE_BYTES(4096), .CACHE_WAYS(8)) dut (
    .clk(clk), .rst_n(rst_n), .req_valid(req_valid), .req_ready(req_ready), .req_we(req_we),
    .req_line_addr(req_line_addr), .req_wdata(req_wdata), .rsp_valid(rsp_valid), .rsp_rdata(rsp_rdata),
    .rsp_integrity_err(rsp_integrity_err), .mem_req_valid(mem_req_valid), .mem_req_ready(mem_req_ready),
    .mem_req_we(mem_req_we), .mem_req_addr(mem_req_addr), .mem_req_wdata(mem_req_wdata),
    .mem_rsp_valid(mem_rsp_valid), .mem_rsp_rdata(mem_rsp_rdata), .seed_wr_en(seed_wr_en),
    .seed_wr_idx(seed_wr_idx), .seed_wr_seed(seed_wr_seed), .events(ev));

  dram_model #(.LATENCY(20), .PT_BASE(PT_BASE), .INIT_BASE(29'h0000_0000), .INIT_STRIDE(1)) u_dram (
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
    d = {8{rand64()}};
    for (int w = 0; w < 8; w++) d[64*w +: 64] = rand64();
    access(1, a, d, q, e, l);
    ref_mem[a] = d;
  endtask

  task automatic rd_check(line_addr_t a);
    line_t q; bit e; int l;
    access(0, a, '0, q, e, l);
    checks++;
    if (e || q !== ref_mem[a]) begin failures++; $display("FAIL read %h err=%0d", a, e); end
  endtask

  task automatic rd_expect_fail(line_addr_t a);
    line_t q; bit e; int l;
    access(0, a, '0, q, e, l);
    checks++;
    if (!e || q !== '0) begin failures++; $display("FAIL read %h should fail integrity", a); end
  endtask

  function automatic pba_vec_t pt_of(line_addr_t a);
    return pt_unpack(u_dram.peek(PT_BASE + pba_t'(a / 4)));
  endfunction

  initial begin
    line_addr_t lines [64];
    pba_vec_t old_pt, new_pt;
    line_t old_blk [8];
    line_t q; bit e; int lat;

    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); seed_wr_en = 1; seed_wr_idx = 4'(i); seed_wr_seed = rand64();
    end
    @(negedge clk); seed_wr_en = 0;

    // never-written lines do not verify
    rd_expect_fail(27'h100);
    rd_expect_fail(27'h101);

    // 12 groups, 4 lines each
    for (int i = 0; i < 48; i++) wr(27'(i));
    for (int i = 0; i < 48; i++) rd_check(27'(i));

    // random mix incl. far lines (TLB index conflicts)
    for (int i = 0; i < 64; i++) lines[i] = (i < 48) ? 27'(i) : 27'(27'h4000 * (i - 47) + i);
    for (int i = 48; i < 64; i++) wr(lines[i]);
    for (int n = 0; n < 300; n++) begin
      automatic line_addr_t a = lines[$urandom_range(0, 63)];
      if ($urandom_range(0, 2) == 0) wr(a);
      else                           rd_check(a);
    end

    // relocation and replay: capture line 5's blocks, rewrite, put the old ones back
    old_pt = pt_of(27'd5);
    foreach (old_blk[b]) old_blk[b] = u_dram.peek(old_pt[b]);
    wr(27'd5);
    new_pt = pt_of(27'd5);
    for (int b = 0; b < 8; b++)
      for (int c = 0; c < 8; c++) begin
        checks++;
        if (new_pt[b] == old_pt[c]) begin failures++; $display("FAIL block not relocated"); end
      end
    foreach (old_blk[b]) u_dram.poke(old_pt[b], old_blk[b]);
    rd_check(27'd5);
    rd_check(27'd4);
    rd_check(27'd6);

    // tamper: alter one share of line 9 in DRAM, evict it from the shares cache
    begin
      automatic pba_vec_t pt = pt_of(27'd9);
      automatic pba_t a = pt[ref_blk(1, 3)];
      automatic line_t blk = u_dram.peek(a);
      blk[72*ref_slot(1, 3) +: 8] ^= 8'h40;
      u_dram.poke(a, blk);
      for (int i = 16; i < 48; i++) rd_check(27'(i));
      rd_expect_fail(27'd9);
      rd_check(27'd8);      // the other lines of the group are untouched
      wr(27'd9);            // rewriting the line repairs it
      rd_check(27'd9);
    end

    // latency of a read that hits TLB and shares cache: 1 (TLB) + 8 x 2 (cache
    // lookups) + 1 (decode start) + 1005 (interpolation) + 1 (response) = 1024
    rd_check(27'd9);
    access(0, 27'd9, '0, q, e, lat);
    checks++;
    if (lat != 1024) begin failures++; $display("FAIL hit latency %0d", lat); end

    $display("events: tlb_hit=%0d tlb_miss=%0d sc_hit=%0d sc_miss=%0d evict=%0d reloc=%0d integ_fail=%0d",
             n_tlb_hit, n_tlb_miss, n_sc_hit, n_sc_miss, n_evict, n_reloc, n_integ);
    checks++; if (n_tlb_hit  == 0) begin failures++; $display("FAIL no TLB hit"); end
    checks++; if (n_tlb_miss == 0) begin failures++; $display("FAIL no page walk"); end
    checks++; if (n_sc_hit   == 0) begin failures++; $display("FAIL no shares-cache hit"); end
    checks++; if (n_sc_miss  == 0) begin failures++; $display("FAIL no shares-cache miss"); end
    checks++; if (n_evict    == 0) begin failures++; $display("FAIL no eviction"); end
    checks++; if (n_reloc    == 0) begin failures++; $display("FAIL no relocation"); end
    checks++; if (n_integ    != 3) begin failures++; $display("FAIL integrity failures %0d, expected 3", n_integ); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
