// ssm_top - Secure Scattered Memory engine in the memory controller.
//
// Sits behind the last-level cache and serves 64-byte line reads and writes
// to protected memory without storing ciphertext, counters, MACs or an
// integrity tree. Each data line lives off chip only as ten polynomial shares
// scattered over a group of eight share blocks that it shares with its three
// neighbouring lines (see ssm_pkg).
//
// Read of line L:
//   1. SSM TLB lookup of L's group; on a miss, a page walk reads the group's
//      SSM page-table line at PT_BASE + group (eight block addresses).
//   2. The eight share blocks are looked up in the shares cache one by one;
//      misses are read from DRAM and filled into the cache.
//   3. The data processing unit picks L's ten shares, interpolates and checks
//      the padding and seed coefficients. The response carries the line, or
//      zeros and rsp_integrity_err if the check failed.
// Write of line L:
//   1-2. As for a read: the whole group is fetched (the other lines' shares
//      must move with it).
//   3. L is re-encoded with fresh random x coordinates; its ten slots are
//      overwritten, the 16 filler slots get new random values, the other
//      lines' shares are copied unchanged.
//   4. Relocation: eight fresh block addresses are taken from the free pool,
//      the old ones are returned; the eight blocks are written to DRAM at the
//      new addresses and filled into the shares cache; the new page-table
//      line is written to DRAM and into the SSM TLB. Stale shares left at the
//      old addresses are therefore never read again (replay protection).
//
// Interfaces: request req_valid/req_ready (accepted when both are high; one
// request at a time), response rsp_valid pulse (also for writes, as a
// completion). DRAM side: mem_req_valid held until mem_req_ready; one read
// outstanding, its data returns as a mem_rsp_valid pulse. seed_wr_* loads
// coefficient seeds. events pulses one bit per mechanism for performance
// counters. Timing: a read that hits the TLB and cache completes 1024 cycles
// after the request (TLB, eight shares-cache lookups, 1005 of interpolation).
//
// The flow (TLB, page walk, shares cache, segmentation/reconstruction,
// relocation on every write) is the paper's. Blocking one-request operation,
// the page-table format, write-through of share blocks and the free-pool
// policy are this design's choices.
// rst_n also appears in the assertions' disable iff clauses, which lint tools
// may report as a synchronous use of the asynchronous reset; no logic uses it so.
module ssm_top
  import ssm_pkg::*;
#(
  parameter pba_t        PT_BASE      = 29'h1F00_0000,
  parameter pba_t        POOL_BASE    = 29'h1000_0000,
  parameter int unsigned POOL_DEPTH   = 1024,
  parameter int unsigned TLB_ENTRIES  = 512,
  parameter int unsigned CACHE_BYTES  = 131072,
  parameter int unsigned CACHE_WAYS   = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // request from the LLC side
  input  logic                  req_valid,
  output logic                  req_ready,
  input  logic                  req_we,
  input  line_addr_t            req_line_addr,
  input  line_t                 req_wdata,
  output logic                  rsp_valid,
  output line_t                 rsp_rdata,
  output logic                  rsp_integrity_err,
  // DRAM
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic                  mem_req_we,
  output pba_t                  mem_req_addr,
  output line_t                 mem_req_wdata,
  input  logic                  mem_rsp_valid,
  input  line_t                 mem_rsp_rdata,
  // seed update
  input  logic                  seed_wr_en,
  input  logic [SEED_IDX_W-1:0] seed_wr_idx,
  input  gf_t                   seed_wr_seed,
  // performance events
  output ssm_events_t           events
);
  typedef enum logic [4:0] {
    S_IDLE, S_TLB, S_PTW_REQ, S_PTW_WAIT,
    S_F_LOOK, S_F_CHK, S_F_MREQ, S_F_MWAIT,
    S_DEC, S_DEC_WAIT,
    S_ENC, S_ENC_WAIT, S_MERGE, S_FILLER,
    S_RELOC, S_W_MREQ, S_PT_WR, S_DONE
  } state_e;

  localparam int unsigned USED_SLOTS   = DATA_PER_GROUP * T_SHARES;   // 40
  localparam int unsigned FILLER_SLOTS = K_SHARES - USED_SLOTS;       // 16
  localparam int unsigned FW           = $clog2(FILLER_SLOTS);

  state_e                st;
  logic                  op_we;
  line_addr_t            op_addr;
  line_t                 op_wdata;
  pba_t                  pbas     [BLOCKS_PER_GROUP];
  pba_t                  new_pbas [BLOCKS_PER_GROUP];
  line_t                 blocks   [BLOCKS_PER_GROUP];
  logic [BLK_W-1:0]      b;
  logic [FW-1:0]         f;

  // ---------------------------------------------------------------- mapping
  group_t                grp;
  logic [OFF_W-1:0]      offs;
  logic [SEED_IDX_W-1:0] sidx;
  slot_pos_t             pos [T_SHARES];

  address_mapper u_map (.line_addr(op_addr), .group(grp), .offset(offs), .seed_idx(sidx), .pos(pos));

  // ---------------------------------------------------------------- seeds
  gf_t seed;
  seed_store u_seeds (
    .clk(clk), .rst_n(rst_n), .wr_en(seed_wr_en), .wr_idx(seed_wr_idx), .wr_seed(seed_wr_seed),
    .rd_idx(sidx), .rd_seed(seed));

  // ---------------------------------------------------------------- PRNG
  logic [63:0] rnd;
  prng u_prng (.clk(clk), .rst_n(rst_n), .reseed(1'b0), .seed_in('0), .next(1'b1), .rnd(rnd));

  // ---------------------------------------------------------------- TLB
  logic tlb_hit, tlb_wr;
  pba_t tlb_entry [BLOCKS_PER_GROUP];
  pba_t tlb_wdata [BLOCKS_PER_GROUP];

  ssm_tlb #(.ENTRIES(TLB_ENTRIES)) u_tlb (
    .clk(clk), .rst_n(rst_n), .flush(1'b0), .lk_group(grp), .lk_hit(tlb_hit), .lk_entry(tlb_entry),
    .wr_en(tlb_wr), .wr_group(grp), .wr_entry(tlb_wdata));

  // ---------------------------------------------------------------- shares cache
  logic  sc_lk, sc_done, sc_hit, sc_fill, sc_evict;
  pba_t  sc_fill_addr;
  line_t sc_data, sc_fill_data;

  shares_cache #(.SIZE_BYTES(CACHE_BYTES), .WAYS(CACHE_WAYS)) u_sc (
    .clk(clk), .rst_n(rst_n), .lk_valid(sc_lk), .lk_addr(pbas[b]), .lk_done(sc_done), .lk_hit(sc_hit),
    .lk_data(sc_data), .fill_valid(sc_fill), .fill_addr(sc_fill_addr), .fill_data(sc_fill_data),
    .evict(sc_evict));

  // ---------------------------------------------------------------- free pool
  logic pool_ready, pool_op;
  pba_t pool_addr;

  free_pool #(.DEPTH(POOL_DEPTH), .BASE(POOL_BASE)) u_pool (
    .clk(clk), .rst_n(rst_n), .ready(pool_ready), .pop(pool_op), .pop_addr(pool_addr),
    .push(pool_op), .push_addr(pbas[b]), .count());

  // ---------------------------------------------------------------- DPU
  logic   enc_start, enc_done, dec_start, dec_done, dec_ok;
  share_t enc_shares [T_SHARES];
  line_t  dec_plain;

  ssm_dpu u_dpu (
    .clk(clk), .rst_n(rst_n),
    .enc_start(enc_start), .enc_plaintext(op_wdata), .enc_line_addr(op_addr), .enc_seed(seed),
    .enc_x_start(rnd[7:0]), .enc_busy(), .enc_done(enc_done), .enc_shares(enc_shares),
    .dec_start(dec_start), .dec_blocks(blocks), .dec_offset(offs), .dec_line_addr(op_addr),
    .dec_seed(seed), .dec_busy(), .dec_done(dec_done), .dec_plaintext(dec_plain), .dec_ok(dec_ok));

  // ---------------------------------------------------------------- control outputs
  pba_vec_t pt_rd;
  always_comb pt_rd = pt_unpack(mem_rsp_rdata);

  always_comb begin
    req_ready     = (st == S_IDLE) && pool_ready;
    sc_lk         = (st == S_F_LOOK);
    enc_start     = (st == S_ENC);
    dec_start     = (st == S_DEC);
    pool_op       = (st == S_RELOC);
    tlb_wr        = ((st == S_PTW_WAIT) && mem_rsp_valid) || (st == S_PT_WR && mem_req_ready);
    for (int i = 0; i < int'(BLOCKS_PER_GROUP); i++)
      tlb_wdata[i] = (st == S_PT_WR) ? new_pbas[i] : pt_rd[i];

    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = '0;
    mem_req_wdata = '0;
    unique case (st)
      S_PTW_REQ: begin mem_req_valid = 1'b1; mem_req_addr = PT_BASE + pba_t'(grp); end
      S_F_MREQ:  begin mem_req_valid = 1'b1; mem_req_addr = pbas[b]; end
      S_W_MREQ:  begin
        mem_req_valid = 1'b1; mem_req_we = 1'b1;
        mem_req_addr  = new_pbas[b]; mem_req_wdata = blocks[b];
      end
      S_PT_WR:   begin
        mem_req_valid = 1'b1; mem_req_we = 1'b1;
        mem_req_addr  = PT_BASE + pba_t'(grp); mem_req_wdata = pt_pack(new_pbas);
      end
      default: ;
    endcase

    sc_fill      = ((st == S_F_MWAIT) && mem_rsp_valid) || ((st == S_W_MREQ) && mem_req_ready);
    sc_fill_addr = (st == S_W_MREQ) ? new_pbas[b] : pbas[b];
    sc_fill_data = (st == S_W_MREQ) ? blocks[b]   : mem_rsp_rdata;

    events            = '0;
    events.tlb_hit    = (st == S_TLB) && tlb_hit;
    events.tlb_miss   = (st == S_TLB) && !tlb_hit;
    events.sc_hit     = (st == S_F_CHK) && sc_done && sc_hit;
    events.sc_miss    = (st == S_F_CHK) && sc_done && !sc_hit;
    events.sc_evict   = sc_evict;
    events.relocate   = (st == S_PT_WR) && mem_req_ready;
    events.integ_fail = (st == S_DEC_WAIT) && dec_done && !dec_ok;
  end

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st                <= S_IDLE;
      op_we             <= 1'b0;
      op_addr           <= '0;
      op_wdata          <= '0;
      b                 <= '0;
      f                 <= '0;
      rsp_valid         <= 1'b0;
      rsp_rdata         <= '0;
      rsp_integrity_err <= 1'b0;
      for (int i = 0; i < int'(BLOCKS_PER_GROUP); i++) begin
        pbas[i] <= '0; new_pbas[i] <= '0; blocks[i] <= '0;
      end
    end else begin
      rsp_valid <= 1'b0;
      unique case (st)
        S_IDLE: if (req_valid && req_ready) begin
          op_we    <= req_we;
          op_addr  <= req_line_addr;
          op_wdata <= req_wdata;
          st       <= S_TLB;
        end
        S_TLB: begin
          b <= '0;
          if (tlb_hit) begin
            for (int i = 0; i < int'(BLOCKS_PER_GROUP); i++) pbas[i] <= tlb_entry[i];
            st <= S_F_LOOK;
          end else begin
            st <= S_PTW_REQ;
          end
        end
        S_PTW_REQ:  if (mem_req_ready) st <= S_PTW_WAIT;
        S_PTW_WAIT: if (mem_rsp_valid) begin
          for (int i = 0; i < int'(BLOCKS_PER_GROUP); i++) pbas[i] <= pt_rd[i];
          st <= S_F_LOOK;
        end
        S_F_LOOK: st <= S_F_CHK;
        S_F_CHK: if (sc_done) begin
          if (sc_hit) begin
            blocks[b] <= sc_data;
            b         <= b + 1'b1;
            st        <= (b == BLK_W'(BLOCKS_PER_GROUP - 1)) ? (op_we ? S_ENC : S_DEC) : S_F_LOOK;
          end else begin
            st <= S_F_MREQ;
          end
        end
        S_F_MREQ:  if (mem_req_ready) st <= S_F_MWAIT;
        S_F_MWAIT: if (mem_rsp_valid) begin
          blocks[b] <= mem_rsp_rdata;
          b         <= b + 1'b1;
          st        <= (b == BLK_W'(BLOCKS_PER_GROUP - 1)) ? (op_we ? S_ENC : S_DEC) : S_F_LOOK;
        end
        // ---- read: reconstruct and verify
        S_DEC: st <= S_DEC_WAIT;
        S_DEC_WAIT: if (dec_done) begin
          rsp_valid         <= 1'b1;
          rsp_rdata         <= dec_ok ? dec_plain : '0;
          rsp_integrity_err <= !dec_ok;
          st                <= S_IDLE;
        end
        // ---- write: segment, merge, relocate
        S_ENC: st <= S_ENC_WAIT;
        S_ENC_WAIT: if (enc_done) st <= S_MERGE;
        S_MERGE: begin
          for (int m = 0; m < int'(T_SHARES); m++)
            blocks[pos[m].blk][SHARE_W*pos[m].slot +: SHARE_W] <= enc_shares[m];
          f  <= '0;
          st <= S_FILLER;
        end
        S_FILLER: begin
          blocks[(USED_SLOTS + int'(f)) % BLOCKS_PER_GROUP][SHARE_W*((USED_SLOTS + int'(f)) / BLOCKS_PER_GROUP) +: SHARE_W]
            <= {rnd[63:56], rnd};
          f <= f + 1'b1;
          if (f == FW'(FILLER_SLOTS - 1)) begin
            b  <= '0;
            st <= S_RELOC;
          end
        end
        S_RELOC: begin
          new_pbas[b] <= pool_addr;
          b           <= b + 1'b1;
          if (b == BLK_W'(BLOCKS_PER_GROUP - 1)) st <= S_W_MREQ;
        end
        S_W_MREQ: if (mem_req_ready) begin
          b <= b + 1'b1;
          if (b == BLK_W'(BLOCKS_PER_GROUP - 1)) st <= S_PT_WR;
        end
        S_PT_WR: if (mem_req_ready) begin
          for (int i = 0; i < int'(BLOCKS_PER_GROUP); i++) pbas[i] <= new_pbas[i];
          st <= S_DONE;
        end
        S_DONE: begin
          rsp_valid         <= 1'b1;
          rsp_rdata         <= '0;
          rsp_integrity_err <= 1'b0;
          st                <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- protocol rules
  a_mem_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (mem_req_valid && !mem_req_ready) |=> (mem_req_valid && $stable(mem_req_addr) && $stable(mem_req_we)));
  a_no_rsp_unasked: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> (st == S_PTW_WAIT || st == S_F_MWAIT));
  a_one_lookup_or_fill: assert property (@(posedge clk) disable iff (!rst_n) !(sc_lk && sc_fill));
endmodule
