// rng_xorshift: 32-bit random word generator for the Paillier randomiser r.
//
// A xorshift generator (x ^= x << 13; x ^= x >> 17; x ^= x << 5) with period
// 2^32 - 1. Each clock with `en` high advances the state; `rnd` is the
// current state, so the word following an `en` clock is the next output.
// The state resets to SEED (must be non-zero); `reseed` loads seed_in
// (a zero seed_in is replaced by SEED to keep the generator alive).
// The paper only names a random number generator inside each processor;
// the generator type is this design's choice. It is not a cryptographically
// secure source: a deployment should replace it or reseed it from one.
module rng_xorshift #(
  parameter logic [31:0] SEED = 32'h2545_F491
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        reseed,
  input  logic [31:0] seed_in,
  output logic [31:0] rnd
);
  logic [31:0] s1, s2, s3;

  always_comb begin
    s1 = rnd ^ (rnd << 13);
    s2 = s1 ^ (s1 >> 17);
    s3 = s2 ^ (s2 << 5);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      rnd <= SEED;
    else if (reseed) rnd <= (seed_in == '0) ? SEED : seed_in;
    else if (en)     rnd <= s3;
  end

  initial assert (SEED != '0);

endmodule
