// tb_shares_cache - runs the cache at its default size (128 KB, 8 ways,
// 256 sets) against a reference LRU model: 4000 random lookups and fills on
// addresses that crowd a few sets, checking hit/miss, returned data and the
// evict pulse, plus a directed LRU case (nine blocks into one set, the least
// recently used one is the one replaced).
module tb_shares_cache;
  import ssm_pkg::*;
  import ssm_ref_pkg::*;
  logic clk = 0, rst_n = 0, lk_valid = 0, lk_done, lk_hit, fill_valid = 0, evict;
  pba_t lk_addr, fill_addr;
  line_t lk_data, fill_data;
  int checks = 0, failures = 0;
  int hits = 0, evicts = 0;

  // model: per set a list of (addr) ordered most-recent first, and data
  pba_t  lru [256][$];
  line_t mdata [pba_t];

  always #5 clk = ~clk;

  shares_cache dut (.clk(clk), .rst_n(rst_n), .lk_valid(lk_valid), .lk_addr(lk_addr), .lk_done(lk_done),
                    .lk_hit(lk_hit), .lk_data(lk_data), .fill_valid(fill_valid), .fill_addr(fill_addr),
                    .fill_data(fill_data), .evict(evict));

  function automatic int find(int s, pba_t a);
    foreach (lru[s][i]) if (lru[s][i] == a) return i;
    return -1;
  endfunction

  task automatic lookup(pba_t a);
    int s = int'(a % 256);
    int i = find(s, a);
    @(negedge clk); lk_valid = 1; lk_addr = a;
    @(negedge clk); lk_valid = 0;
    checks++;
    if (lk_done !== 1'b1 || lk_hit !== (i >= 0)) begin failures++; $display("FAIL lookup %h hit=%0d expected %0d", a, lk_hit, i >= 0); end
    if (i >= 0) begin
      hits++;
      checks++;
      if (lk_data !== mdata[a]) begin failures++; $display("FAIL data %h", a); end
      lru[s].delete(i); lru[s].push_front(a);
    end
  endtask

  task automatic fill(pba_t a);
    int s = int'(a % 256);
    int i = find(s, a);
    bit ev = 0;
    @(negedge clk); fill_valid = 1; fill_addr = a; fill_data = {8{rand64()}};
    mdata[a] = fill_data;
    if (i >= 0) lru[s].delete(i);
    else if (lru[s].size() == 8) begin void'(lru[s].pop_back()); ev = 1; end
    lru[s].push_front(a);
    @(negedge clk); fill_valid = 0;
    checks++;
    if (evict !== ev) begin failures++; $display("FAIL evict %0d expected %0d (fill %h)", evict, ev, a); end
    if (ev) evicts++;
  endtask

  initial begin
    lk_addr = '0; fill_addr = '0; fill_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // directed: nine blocks into set 5
    for (int k = 0; k < 8; k++) fill(pba_t'(5 + 256*k));
    lookup(pba_t'(5));                 // block 0 becomes most recent; block 1 is LRU
    fill(pba_t'(5 + 256*8));           // replaces block 1
    lookup(pba_t'(5 + 256*1));         // miss
    lookup(pba_t'(5));                 // hit
    for (int n = 0; n < 4000; n++) begin
      automatic pba_t a = pba_t'($urandom_range(0, 3)) + pba_t'(256 * $urandom_range(0, 11));
      if ($urandom_range(0, 2) == 0) fill(a);
      else                           lookup(a);
    end
    checks++;
    if (hits < 100 || evicts < 10) begin failures++; $display("FAIL too few hits/evictions %0d %0d", hits, evicts); end
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
