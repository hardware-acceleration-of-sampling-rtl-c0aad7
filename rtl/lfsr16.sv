// lfsr16: the sampler's pseudo-random number generator.
//
// A 16-register linear-feedback shift register, chosen (as in the published design)
// instead of a linear-congruential generator because it needs no modulo or multiply
// to produce a number. This implementation is a right-shifting Galois LFSR: when
// the bit leaving reg0 is 1 the feedback mask is XORed into the shifted state. The
// polynomial x^16+x^14+x^13+x^11+1 is maximal length, so the state walks through
// all 65,535 non-zero values before repeating; the value 0 never appears. The
// polynomial and the seed handling are this design's choices.
//
// Interface: `r` is the current state. It advances by one step at each rising clock
// edge on which `en` is high. `seed_we` loads `seed` instead (a zero seed, which
// would lock the register, loads SEED). Reset loads SEED.
module lfsr16
  import concat_pkg::*;
#(
  parameter rand_t SEED = 16'hACE1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  seed_we,
  input  rand_t seed,
  output rand_t r
);

  rand_t state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= SEED;
    end else if (seed_we) begin
      state <= (seed == '0) ? SEED : seed;
    end else if (en) begin
      state <= (state >> 1) ^ (state[0] ? LFSR_MASK : '0);
    end
  end

  assign r = state;

  initial assert (SEED != '0) else $error("lfsr16: SEED must be non-zero");

endmodule
