// query_gen_frnn: prefix-based query generator of the frNN variant.
//
// From the group value V(g_i) it builds a ternary query that approximates
// "all priorities within Delta_i of V(g_i)" with a single exact-match search:
//   1. a Q-bit multiplier computes Delta_i = round(lambda'/m * V(g_i)),
//   2. the mask generator sets the mask from the leftmost 1 of Delta_i down,
//   3. Q OR gates form V OR mask; the masked bits are the don't-care bits.
// Example (Q = 8): V 10101010, Delta 00001001, mask 00001111, query 1010xxxx.
// The structure follows the paper; the registered output (valid one cycle
// after start) and the data/don't-care encoding are this design's choices.
module query_gen_frnn
  import amper_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  word_t  v,
  input  word_t  lambda_pm,   // lambda'/m, UQ(Q-FRAC).FRAC
  output query_t query,
  output word_t  delta,
  output logic   valid
);

  word_t delta_c, mask_c;

  q_multiplier #(.W(Q), .FRAC(FRAC), .ROUND(1'b1)) u_mul (
    .a(v), .b(lambda_pm), .p(delta_c)
  );

  mask_generator #(.W(Q)) u_mask (.delta(delta_c), .mask(mask_c));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      query <= '0;
      delta <= '0;
    end else begin
      valid <= start;
      if (start) begin
        query.data <= v | mask_c;   // the Q OR gates
        query.dc   <= mask_c;
        delta      <= delta_c;
      end
    end
  end

endmodule
