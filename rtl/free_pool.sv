// free_pool - relocation allocator for SSM share blocks.
//
// SSM defends against replay by never writing a group back where it was read
// from: every write moves the group's eight share blocks to fresh physical
// locations and records them in the SSM page table, so stale copies left at
// the old locations are never read again. This block hands out those fresh
// locations and takes back the ones left behind. It is a FIFO free list of
// DEPTH block addresses, initialised to BASE .. BASE+DEPTH-1 one entry per
// cycle after reset (ready rises after DEPTH cycles); the oldest freed block
// is reused first, so a freed location is rewritten before it can be read.
// The paper requires relocation on every write but does not say how new
// locations are chosen; the FIFO is this design's choice.
//
// Timing: pop_addr shows the head; pop removes it at the clock edge. push
// appends push_addr at the clock edge. pop and push may share a cycle. The
// engine pops eight and pushes eight per write, so the count stays at DEPTH
// in steady state; popping an empty pool or pushing a full one is an error
// (asserted).
// rst_n also appears in the assertions' disable iff clauses, which lint tools
// may report as a synchronous use of the asynchronous reset; no logic uses it so.
module free_pool
  import ssm_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter pba_t        BASE  = 29'h1000_0000
) (
  input  logic                 clk,
  input  logic                 rst_n,
  output logic                 ready,
  input  logic                 pop,
  output pba_t                 pop_addr,
  input  logic                 push,
  input  pba_t                 push_addr,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = $clog2(DEPTH);

  pba_t          mem [DEPTH];
  logic [AW-1:0] head, tail;
  logic [AW:0]   init_cnt;

  assign ready    = (init_cnt == (AW+1)'(DEPTH));
  assign pop_addr = mem[head];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head     <= '0;
      tail     <= '0;
      count    <= '0;
      init_cnt <= '0;
    end else if (!ready) begin
      init_cnt <= init_cnt + 1'b1;
      count    <= count + 1'b1;
    end else begin
      if (pop)  head <= (head == AW'(DEPTH - 1)) ? '0 : head + 1'b1;
      if (push) tail <= (tail == AW'(DEPTH - 1)) ? '0 : tail + 1'b1;
      unique case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!ready)    mem[init_cnt[AW-1:0]] <= BASE + pba_t'(init_cnt);
    else if (push) mem[tail] <= push_addr;
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> (count != '0));
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n)
                                   (push && !pop) |-> (count != ($clog2(DEPTH+1))'(DEPTH)));
  a_ready:        assert property (@(posedge clk) disable iff (!rst_n) (pop || push) |-> ready);
endmodule
