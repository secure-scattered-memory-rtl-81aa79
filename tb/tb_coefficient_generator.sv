// tb_coefficient_generator - checks the ten coefficients for 300 random
// lines: data words in c0..c7 (c0 = low word), c8 = 0, c9 = seed*(2*addr+1)
// computed with the reference multiplier.
module tb_coefficient_generator;
  import ssm_pkg::*;
  import ssm_ref_pkg::*;
  line_t plain;
  line_addr_t addr;
  gf_t seed;
  gf_t coef [N_COEF];
  int checks = 0, failures = 0;

  coefficient_generator dut (.plaintext(plain), .line_addr(addr), .seed(seed), .coef(coef));

  initial begin
    for (int n = 0; n < 300; n++) begin
      for (int w = 0; w < 8; w++) plain[64*w +: 64] = rand64();
      addr = 27'($urandom()); seed = rand64(); #1;
      for (int w = 0; w < 8; w++) begin
        checks++;
        if (coef[w] !== plain[64*w +: 64]) begin failures++; $display("FAIL c%0d", w); end
      end
      checks++;
      if (coef[8] !== '0) begin failures++; $display("FAIL pad"); end
      checks++;
      if (coef[9] !== ref_check(seed, addr)) begin failures++; $display("FAIL check coef %h", coef[9]); end
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
