// address_mapper - SSM address mapping of one data line.
//
// A data line address splits into a group id (upper bits) and an offset
// within the group (lowest OFF_W bits): consecutive lines share one group of
// eight share blocks, which is what lets the SSM TLB and shares cache serve
// neighbouring lines, as the paper intends. The seed index is the group id
// modulo the number of seeds. For each of the ten shares of the line the
// mapper gives the block (0..7) and slot (0..6) where it lives: share m of
// offset o is at linear slot o*10 + m, block (o*10+m) % 8, slot (o*10+m) / 8,
// so each consecutive line starts two blocks further on. The paper's own
// rotation, slot (offset + i) % 7 in block i, holds only eight shares per
// line, fewer than the ten a degree-9 polynomial needs; the linear-slot form
// is this design's generalisation of it. Purely combinational.
// group and offset are plain bit fields of the line address, so those
// output bits are wires by nature, as is seed_idx (low group bits); only pos
// involves logic.
module address_mapper
  import ssm_pkg::*;
(
  input  line_addr_t             line_addr,
  output group_t                 group,
  output logic [OFF_W-1:0]       offset,
  output logic [SEED_IDX_W-1:0]  seed_idx,
  output slot_pos_t              pos [T_SHARES]
);
  always_comb begin
    group    = line_addr[LINE_W-1:OFF_W];
    offset   = line_addr[OFF_W-1:0];
    seed_idx = group[SEED_IDX_W-1:0];
    for (int m = 0; m < int'(T_SHARES); m++) pos[m] = share_pos(offset, m);
  end
endmodule
