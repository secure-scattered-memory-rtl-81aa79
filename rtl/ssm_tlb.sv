// ssm_tlb - SSM TLB: cache of SSM page-table entries.
//
// An SSM page-table entry maps a group of consecutive data lines to the
// physical addresses of its eight share blocks. Because four consecutive
// lines share one entry, a run of sequential accesses needs one page walk.
// Organisation: ENTRIES entries (512, as in the paper), direct-mapped,
// indexed by the low group bits, tagged with the rest; the organisation is
// this design's choice. Storage is a plain array standing in for the SRAM
// macro the paper uses.
//
// Timing: lookup is combinational from lk_group to lk_hit/lk_entry. A write
// (fill after a page walk, or update after a relocation) takes effect at the
// next clock edge and replaces whatever held the index. flush invalidates all
// entries (e.g. when software rewrites the page table).
module ssm_tlb
  import ssm_pkg::*;
#(
  parameter int unsigned ENTRIES = 512
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     flush,
  input  group_t   lk_group,
  output logic     lk_hit,
  output pba_t     lk_entry [BLOCKS_PER_GROUP],
  input  logic     wr_en,
  input  group_t   wr_group,
  input  pba_t     wr_entry [BLOCKS_PER_GROUP]
);
  localparam int unsigned IDX_W = $clog2(ENTRIES);
  localparam int unsigned TAG_W = GROUP_W - IDX_W;

  logic [ENTRIES-1:0] valid;
  logic [TAG_W-1:0]   tags [ENTRIES];
  pba_t               ents [ENTRIES][BLOCKS_PER_GROUP];

  logic [IDX_W-1:0] lk_idx, wr_idx;
  assign lk_idx = lk_group[IDX_W-1:0];
  assign wr_idx = wr_group[IDX_W-1:0];

  assign lk_hit = valid[lk_idx] && (tags[lk_idx] == lk_group[GROUP_W-1:IDX_W]);
  always_comb
    for (int b = 0; b < int'(BLOCKS_PER_GROUP); b++) lk_entry[b] = ents[lk_idx][b];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      valid <= '0;
    else if (flush)  valid <= '0;
    else if (wr_en)  valid[wr_idx] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      tags[wr_idx] <= wr_group[GROUP_W-1:IDX_W];
      for (int b = 0; b < int'(BLOCKS_PER_GROUP); b++) ents[wr_idx][b] <= wr_entry[b];
    end
  end
endmodule
