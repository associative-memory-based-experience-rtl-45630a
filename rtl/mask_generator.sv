// mask_generator: mask vector for the prefix-based frNN query.
//
// Finds p, the position of the leftmost '1' of Delta_i, and outputs a mask
// with every bit left of p at 0 and p and every bit right of it at 1. As in
// the paper it is a chain of OR gates: mask[j] = OR of delta[W-1:j].
// Example: delta 00001001 -> mask 00001111. Delta = 0 gives mask 0, an exact
// query. Purely combinational.
module mask_generator #(
  parameter int unsigned W = 32
) (
  input  logic [W-1:0] delta,
  output logic [W-1:0] mask
);

  always_comb begin
    mask[W-1] = delta[W-1];
    for (int j = W - 2; j >= 0; j--)
      mask[j] = mask[j+1] | delta[j];
  end

endmodule
