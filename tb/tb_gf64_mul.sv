// tb_gf64_mul - checks the GF(2^64) multiplier against a carry-less
// multiply-then-reduce model on corner operands and 2000 random pairs, plus
// the field identities a*1 = a and a*b = b*a.
module tb_gf64_mul;
  import ssm_ref_pkg::*;
  logic [63:0] a, b, p;
  int checks = 0, failures = 0;

  gf64_mul dut (.a(a), .b(b), .p(p));

  task automatic check(logic [63:0] x, logic [63:0] y);
    a = x; b = y; #1;
    checks++;
    if (p !== ref_mul(x, y)) begin
      failures++;
      $display("FAIL %h * %h = %h, expected %h", x, y, p, ref_mul(x, y));
    end
  endtask

  initial begin
    check(64'h0, 64'h1234);
    check(64'h1, 64'hDEAD_BEEF_0123_4567);
    check(64'h8000_0000_0000_0000, 64'h2);   // x^63 * x = x^4+x^3+x+1
    a = 64'h8000_0000_0000_0000; b = 64'h2; #1;
    checks++; if (p !== 64'h1B) failures++;
    check(64'hFFFF_FFFF_FFFF_FFFF, 64'hFFFF_FFFF_FFFF_FFFF);
    for (int i = 0; i < 2000; i++) check(rand64(), rand64());
    for (int i = 0; i < 100; i++) begin
      logic [63:0] x, y, p1;
      x = rand64(); y = rand64();
      a = x; b = y; #1; p1 = p;
      a = y; b = x; #1;
      checks++; if (p !== p1) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
