// dram_model - behavioural model of the off-chip DRAM seen by the SSM engine
// (not synthesizable; testbench only).
//
// Sparse storage (associative array of 64-byte lines). A write is accepted in
// one cycle; a read is accepted when no read is pending and returns its line
// as a rsp_valid pulse LATENCY cycles later. Lines never written read as
// zero, except the SSM page-table region at PT_BASE: the entry of group g
// there initially points its eight share blocks at
// INIT_BASE + (8*g + b) * INIT_STRIDE, i.e. the layout system software would
// set up before enabling the engine. peek/poke give the testbench the
// attacker's view: read or overwrite any line without the engine noticing.
module dram_model
  import ssm_pkg::*;
#(
  parameter int unsigned LATENCY     = 20,
  parameter pba_t        PT_BASE     = 29'h1F00_0000,
  parameter pba_t        INIT_BASE   = 29'h0000_0000,
  parameter int unsigned INIT_STRIDE = 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req_valid,
  output logic  req_ready,
  input  logic  req_we,
  input  pba_t  req_addr,
  input  line_t req_wdata,
  output logic  rsp_valid,
  output line_t rsp_rdata
);
  line_t mem [pba_t];
  int    pending;
  pba_t  raddr;
  int    reads = 0, writes = 0;

  function automatic line_t peek(pba_t a);
    pba_vec_t v;
    if (mem.exists(a)) return mem[a];
    if (a >= PT_BASE) begin
      for (int b = 0; b < int'(BLOCKS_PER_GROUP); b++)
        v[b] = INIT_BASE + pba_t'((8 * (a - PT_BASE) + b) * INIT_STRIDE);
      return pt_pack(v);
    end
    return '0;
  endfunction

  function automatic void poke(pba_t a, line_t d);
    mem[a] = d;
  endfunction

  assign req_ready = (pending == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending   <= 0;
      rsp_valid <= 1'b0;
      rsp_rdata <= '0;
      raddr     <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (pending > 1) pending <= pending - 1;
      else if (pending == 1) begin
        pending   <= 0;
        rsp_valid <= 1'b1;
        rsp_rdata <= peek(raddr);
      end
      if (req_valid && req_ready) begin
        if (req_we) begin
          poke(req_addr, req_wdata);
          writes++;
        end else begin
          raddr   <= req_addr;
          pending <= LATENCY;
          reads++;
        end
      end
    end
  end
endmodule
