// best_match_sense: best-match (winner-take-all) sensing.
//
// Digital stand-in for the analog winner-take-all that finds the matchline
// discharging slowest: each row's mismatch count `mis_cnt` plays the part of
// its discharge rate, and the eligible row with the smallest count wins.
// Ties go to the lowest index. `found` is 0 when no row is eligible.
// Used once per TCAM array and again to pick the winner among the arrays.
// Purely combinational; the tie rule is this design's choice.
module best_match_sense #(
  parameter int unsigned N  = 64,
  parameter int unsigned DW = 6,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0][DW-1:0] mis_cnt,
  input  logic [N-1:0]         elig,
  output logic                 found,
  output logic [IW-1:0]        idx,
  output logic [DW-1:0]        best
);

  always_comb begin
    found = 1'b0;
    idx   = '0;
    best  = '1;
    for (int unsigned r = 0; r < N; r++) begin
      if (elig[r] && (!found || mis_cnt[r] < best)) begin
        found = 1'b1;
        idx   = IW'(r);
        best  = mis_cnt[r];
      end
    end
  end

endmodule
