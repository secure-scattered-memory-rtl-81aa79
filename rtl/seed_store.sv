// seed_store - on-chip table of secret coefficient seeds.
//
// Each group of data lines is bound to one seed (index = group id mod
// NUM_SEEDS); many lines share one seed, as the paper describes, so the table
// stays small. The seed is used on the write path to form the check
// coefficient and on the read path to verify it; the engine serves one
// request at a time, so one combinational read port serves both. A write port lets the seeds be loaded and
// periodically replaced; the data re-encoding that must follow a change of
// seed is not described in the paper and is left to software (rewrite the
// lines of the affected groups). Seeds reset to zero and must be loaded
// before use. Writes take effect at the next clock edge.
module seed_store
  import ssm_pkg::*;
#(
  parameter int unsigned N = NUM_SEEDS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  logic [$clog2(N)-1:0] wr_idx,
  input  gf_t                  wr_seed,
  input  logic [$clog2(N)-1:0] rd_idx,
  output gf_t                  rd_seed
);
  gf_t seeds [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N); i++) seeds[i] <= '0;
    end else if (wr_en) begin
      seeds[wr_idx] <= wr_seed;
    end
  end

  assign rd_seed = seeds[rd_idx];
endmodule
