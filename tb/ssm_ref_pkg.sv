// ssm_ref_pkg - reference model used by the SSM testbenches.
//
// Written independently of the RTL functions: GF(2^64) multiplication is a
// 128-bit carry-less product followed by a separate reduction by
// x^64 + x^4 + x^3 + x + 1; share placement is recomputed from the layout
// rule (share m of offset o at linear slot 10*o + m, block = slot mod 8,
// position = slot div 8). Also a polynomial evaluator and a shared counter
// for checks.
package ssm_ref_pkg;

  function automatic logic [63:0] ref_mul(logic [63:0] a, logic [63:0] b);
    logic [127:0] p = '0;
    for (int i = 0; i < 64; i++) if (b[i]) p ^= (128'(a) << i);
    for (int i = 127; i >= 64; i--)
      if (p[i]) p ^= (128'h1B << (i - 64)) | (128'h1 << i);
    return p[63:0];
  endfunction

  function automatic logic [63:0] ref_pow(logic [63:0] a, int unsigned e);
    logic [63:0] r = 64'h1;
    for (int i = 0; i < int'(e); i++) r = ref_mul(r, a);
    return r;
  endfunction

  // f(x) = sum c[k] x^k, evaluated power by power (not Horner)
  function automatic logic [63:0] ref_eval(logic [63:0] c [10], logic [63:0] x);
    logic [63:0] s  = '0;
    logic [63:0] xp = 64'h1;
    for (int k = 0; k < 10; k++) begin
      s ^= ref_mul(c[k], xp);
      xp = ref_mul(xp, x);
    end
    return s;
  endfunction

  function automatic logic [63:0] ref_check(logic [63:0] seed, logic [26:0] line);
    return ref_mul(seed, {36'h0, line, 1'b1});
  endfunction

  function automatic int ref_blk(int o, int m);
    return (10*o + m) % 8;
  endfunction

  function automatic int ref_slot(int o, int m);
    return (10*o + m) / 8;
  endfunction

  function automatic logic [63:0] rand64();
    return {$urandom(), $urandom()};
  endfunction

endpackage
