// q_multiplier: the Q-bit multiplier of the query generators.
//
// p = a * b / 2^FRAC, rounded to nearest when ROUND = 1 (Algorithm 1 rounds
// both N_i and Delta_i) or truncated when ROUND = 0, and saturated to W bits.
// With FRAC = 0 it is a plain saturating integer multiplier; with FRAC = W
// and ROUND = 0 it scales a random word onto a range, floor(rnd * n / 2^W).
// Purely combinational; the fixed-point format is this design's choice.
module q_multiplier #(
  parameter int unsigned W     = 32,
  parameter int unsigned FRAC  = 16,
  parameter bit          ROUND = 1'b1
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] p
);

  logic [2*W:0] full;
  logic [2*W:0] scaled;

  always_comb begin
    full = (2*W+1)'(a) * (2*W+1)'(b);
    if (ROUND && FRAC > 0)
      full = full + ((2*W+1)'(1) << (FRAC - 1));
    scaled = full >> FRAC;
    if (|scaled[2*W:W])
      p = '1;
    else
      p = scaled[W-1:0];
  end

endmodule
