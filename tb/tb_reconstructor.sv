// tb_reconstructor - extraction: random group blocks, each offset's ten
// pairs must come from the reference slots. Check: for random lines the
// coefficients built by the reference give the plaintext and pass; a wrong
// seed, a non-zero pad, a wrong check coefficient or a different line address
// fail.
module tb_reconstructor;
  import ssm_pkg::*;
  import ssm_ref_pkg::*;
  line_t blocks [BLOCKS_PER_GROUP];
  logic [OFF_W-1:0] off;
  share_t pairs [T_SHARES];
  gf_t coef [N_COEF];
  line_addr_t addr;
  gf_t seed;
  line_t plain;
  logic ok;
  int checks = 0, failures = 0;

  reconstructor dut (.group_blocks(blocks), .offset(off), .pairs(pairs), .coef(coef),
                     .line_addr(addr), .seed(seed), .plaintext(plain), .integrity_ok(ok));

  initial begin
    for (int n = 0; n < 50; n++) begin
      for (int b = 0; b < 8; b++) for (int w = 0; w < 8; w++) blocks[b][64*w +: 64] = rand64();
      for (int o = 0; o < 4; o++) begin
        off = 2'(o); #1;
        for (int m = 0; m < 10; m++) begin
          checks++;
          if (pairs[m] !== blocks[ref_blk(o, m)][72*ref_slot(o, m) +: 72]) begin
            failures++; $display("FAIL extract o=%0d m=%0d", o, m);
          end
        end
      end
    end
    for (int n = 0; n < 100; n++) begin
      line_t exp;
      addr = 27'($urandom()); seed = rand64();
      for (int k = 0; k < 8; k++) begin coef[k] = rand64(); exp[64*k +: 64] = coef[k]; end
      coef[8] = '0; coef[9] = ref_check(seed, addr); #1;
      checks++;
      if (!ok || plain !== exp) begin failures++; $display("FAIL good line rejected"); end
      seed ^= 64'h1; #1;
      checks++; if (ok) begin failures++; $display("FAIL wrong seed accepted"); end
      seed ^= 64'h1; addr ^= 27'h4; #1;
      checks++; if (ok) begin failures++; $display("FAIL wrong address accepted"); end
      addr ^= 27'h4; coef[8] = 64'h1; #1;
      checks++; if (ok) begin failures++; $display("FAIL non-zero pad accepted"); end
      coef[8] = '0; coef[9] ^= 64'h8000; #1;
      checks++; if (ok) begin failures++; $display("FAIL wrong check accepted"); end
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
