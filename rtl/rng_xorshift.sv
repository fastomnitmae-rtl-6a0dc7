// rng_xorshift: bank of independent xorshift32 generators.
//
// NGEN generators, each 32 bits wide, seeded from the host seed through
// tmae_pkg::rng_seed(seed, SEED_OFS + i). The output is the concatenation of
// their states; all advance by one xorshift32 step on each cycle with `advance`.
// `load` reseeds them (used at the start of a training run). The generator
// type is this design's choice; the paper only requires random sampling.
module rng_xorshift
  import tmae_pkg::*;
#(
  parameter int unsigned NGEN     = 8,
  parameter int unsigned SEED_OFS = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               load,
  input  logic [31:0]        seed,
  input  logic               advance,
  output logic [NGEN*32-1:0] rnd
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NGEN; i++) rnd[i*32 +: 32] <= rng_seed(32'd0, SEED_OFS + i);
    end else if (load) begin
      for (int i = 0; i < NGEN; i++) rnd[i*32 +: 32] <= rng_seed(seed, SEED_OFS + i);
    end else if (advance) begin
      for (int i = 0; i < NGEN; i++) rnd[i*32 +: 32] <= xorshift32(rnd[i*32 +: 32]);
    end
  end
endmodule
