// prng - xorshift64 pseudo-random number generator.
//
// Supplies the random x coordinates of new shares and the filler written into
// unused share slots. State update (Marsaglia xorshift, shifts 13/7/17):
// s ^= s << 13; s ^= s >> 7; s ^= s << 17. The state is never zero; a zero
// reseed value is replaced by the default seed.
//
// Interface: rnd shows the current state; a cycle with next high advances it;
// reseed loads seed_in (reseed has priority). The paper names a PRNG but not
// its kind; xorshift64 is this design's choice and is not a cryptographic
// generator - a production part would use a TRNG-seeded CSPRNG here.
module prng #(
  parameter logic [63:0] SEED = 64'h9E37_79B9_7F4A_7C15
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reseed,
  input  logic [63:0] seed_in,
  input  logic        next,
  output logic [63:0] rnd
);
  logic [63:0] s, t1, t2, t3;

  always_comb begin
    t1 = s  ^ (s  << 13);
    t2 = t1 ^ (t1 >> 7);
    t3 = t2 ^ (t2 << 17);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       s <= SEED;
    else if (reseed)  s <= (seed_in == '0) ? SEED : seed_in;
    else if (next)    s <= t3;
  end

  assign rnd = s;
endmodule
