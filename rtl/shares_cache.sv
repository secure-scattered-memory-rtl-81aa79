// shares_cache - physically addressed LRU cache of share blocks.
//
// Every share-block access of the SSM engine goes here first; a hit avoids a
// DRAM access. A read of one data line touches eight share blocks that also
// hold the shares of its three neighbours, so sequential lines mostly hit.
// Organisation: SIZE_BYTES (128 KB, the paper's default) of 64-byte lines,
// WAYS-way set associative (8 here, this design's choice), true LRU kept as
// per-way age counters (0 = most recent). Storage is a plain array standing in
// for the SRAM macro the paper uses.
//
// Timing: lookup request lk_valid/lk_addr in cycle n; lk_done, lk_hit and
// lk_data are registered and valid in cycle n+1. A hit makes the way most
// recent. A fill (fill_valid/fill_addr/fill_data) writes the block at the next
// edge - into its own way if present, else into the least recently used way -
// and pulses evict in the following cycle if a valid line was displaced.
// The engine writes share blocks through to DRAM and fills them here
// (write-allocate); a lookup and a fill must not be issued in the same cycle.
module shares_cache
  import ssm_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 131072,
  parameter int unsigned WAYS       = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  lk_valid,
  input  pba_t  lk_addr,
  output logic  lk_done,
  output logic  lk_hit,
  output line_t lk_data,
  input  logic  fill_valid,
  input  pba_t  fill_addr,
  input  line_t fill_data,
  output logic  evict
);
  localparam int unsigned LINES = SIZE_BYTES / 64;
  localparam int unsigned SETS  = LINES / WAYS;
  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned TAG_W = PBA_W - SET_W;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  logic [TAG_W-1:0] tags  [SETS][WAYS];
  logic             vld   [SETS][WAYS];
  logic [WAY_W-1:0] age   [SETS][WAYS];
  line_t            data  [SETS][WAYS];

  // ---- lookup: tag compare on the addressed set
  logic [SET_W-1:0] ls, fs;
  logic             l_hit, f_hit;
  logic [WAY_W-1:0] l_way, f_way, f_victim, upd_way;
  logic [SET_W-1:0] upd_set;
  logic             upd;

  assign ls = lk_addr[SET_W-1:0];
  assign fs = fill_addr[SET_W-1:0];

  always_comb begin
    l_hit = 1'b0;
    l_way = '0;
    for (int w = 0; w < int'(WAYS); w++)
      if (vld[ls][w] && tags[ls][w] == lk_addr[PBA_W-1:SET_W]) begin
        l_hit = 1'b1;
        l_way = WAY_W'(w);
      end
  end

  // ---- fill: own way if present, else an invalid way, else the oldest
  always_comb begin
    f_hit    = 1'b0;
    f_way    = '0;
    f_victim = '0;
    for (int w = 0; w < int'(WAYS); w++)
      if (age[fs][w] == WAY_W'(WAYS - 1)) f_victim = WAY_W'(w);
    for (int w = int'(WAYS) - 1; w >= 0; w--)
      if (!vld[fs][w]) f_victim = WAY_W'(w);
    for (int w = 0; w < int'(WAYS); w++)
      if (vld[fs][w] && tags[fs][w] == fill_addr[PBA_W-1:SET_W]) begin
        f_hit = 1'b1;
        f_way = WAY_W'(w);
      end
    if (!f_hit) f_way = f_victim;
  end

  // ---- LRU update (one set per cycle)
  always_comb begin
    upd     = fill_valid || (lk_valid && l_hit);
    upd_set = fill_valid ? fs : ls;
    upd_way = fill_valid ? f_way : l_way;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lk_done <= 1'b0;
      lk_hit  <= 1'b0;
      evict   <= 1'b0;
      for (int s = 0; s < int'(SETS); s++)
        for (int w = 0; w < int'(WAYS); w++) begin
          vld[s][w] <= 1'b0;
          age[s][w] <= WAY_W'(w);
        end
    end else begin
      lk_done <= lk_valid;
      lk_hit  <= lk_valid && l_hit;
      evict   <= fill_valid && !f_hit && vld[fs][f_way];
      if (fill_valid) vld[fs][f_way] <= 1'b1;
      if (upd)
        for (int w = 0; w < int'(WAYS); w++) begin
          if (WAY_W'(w) == upd_way)                  age[upd_set][w] <= '0;
          else if (age[upd_set][w] < age[upd_set][upd_way]) age[upd_set][w] <= age[upd_set][w] + 1'b1;
        end
    end
  end

  always_ff @(posedge clk) begin
    if (lk_valid) lk_data <= data[ls][l_way];
    if (fill_valid) begin
      data[fs][f_way] <= fill_data;
      tags[fs][f_way] <= fill_addr[PBA_W-1:SET_W];
    end
  end
endmodule
