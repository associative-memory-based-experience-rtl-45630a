// urng: Q-bit uniform random number generator.
//
// A 32-bit Galois linear feedback shift register with the maximal-length
// polynomial x^32 + x^22 + x^2 + x + 1. An LFSR URNG of 32 bits is what the
// evaluated accelerator uses; the polynomial, the seed and the seed-load port
// are this design's choices. `rnd` is the current state; `next` advances it
// by one step at the clock edge, so a new word is available every cycle.
// `seed_load` replaces the state (a zero seed, which would lock the LFSR,
// is replaced by SEED). Reset loads SEED.
module urng #(
  parameter int unsigned Q    = 32,
  parameter logic [31:0] TAPS = 32'h8020_0003,
  parameter logic [31:0] SEED = 32'hACE1_2468
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         seed_load,
  input  logic [Q-1:0] seed,
  input  logic         next,
  output logic [Q-1:0] rnd
);

  logic [Q-1:0] state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      state <= Q'(SEED);
    else if (seed_load)
      state <= (seed == '0) ? Q'(SEED) : seed;
    else if (next)
      state <= state[0] ? ((state >> 1) ^ Q'(TAPS)) : (state >> 1);
  end

  assign rnd = state;

endmodule
