// tb_address_mapper - checks group, offset, seed index and the ten share
// positions against the reference layout rule for 500 random line addresses,
// and that the four lines of a group use 40 distinct slots.
module tb_address_mapper;
  import ssm_pkg::*;
  import ssm_ref_pkg::*;
  line_addr_t addr;
  group_t grp;
  logic [OFF_W-1:0] off;
  logic [SEED_IDX_W-1:0] sidx;
  slot_pos_t pos [T_SHARES];
  int checks = 0, failures = 0;

  address_mapper dut (.line_addr(addr), .group(grp), .offset(off), .seed_idx(sidx), .pos(pos));

  initial begin
    for (int n = 0; n < 500; n++) begin
      addr = 27'($urandom()); #1;
      checks++;
      if (grp !== addr / 4 || off !== addr % 4 || sidx !== (addr / 4) % 16) begin
        failures++; $display("FAIL addr %h: grp %h off %0d sidx %0d", addr, grp, off, sidx);
      end
      for (int m = 0; m < 10; m++) begin
        checks++;
        if (int'(pos[m].blk) != ref_blk(int'(addr % 4), m) || int'(pos[m].slot) != ref_slot(int'(addr % 4), m)) begin
          failures++; $display("FAIL addr %h share %0d at %0d/%0d", addr, m, pos[m].blk, pos[m].slot);
        end
      end
    end
    begin
      bit used [8][7];
      int dup = 0;
      foreach (used[i, j]) used[i][j] = 0;
      for (int o = 0; o < 4; o++) begin
        addr = 27'(o); #1;
        for (int m = 0; m < 10; m++) begin
          if (used[pos[m].blk][pos[m].slot]) dup++;
          used[pos[m].blk][pos[m].slot] = 1;
        end
      end
      checks++;
      if (dup != 0) begin failures++; $display("FAIL %0d slots shared by two lines", dup); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
