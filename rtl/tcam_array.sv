// tcam_array: one ROWS x Q ternary CAM array holding priority entries.
//
// Each row stores one Q-bit priority and a valid bit. A search compares the
// ternary query with every row at once: a cell mismatches when its bit
// differs from a query bit that is not don't-care (the cell XNOR), and a
// row's matchline reports a match only when no cell mismatches.
//  - Exact-match sensing: `match[r]` = valid row with zero mismatches (frNN).
//  - Best-match sensing: the valid, non-excluded row with the fewest
//    mismatching cells (Hamming distance to the query) is reported (kNN).
// Writes (new priority or priority update) take effect at the clock edge;
// the search and the read port are combinational. The read port and the
// exclusion input are this design's additions; precharge and sense-amplifier
// timing are not modelled. Reset and `clr` clear only the valid bits
// (clr wins over a write in the same cycle).
module tcam_array
  import amper_pkg::*;
#(
  parameter int unsigned ROWS = 64,
  localparam int unsigned RW  = $clog2(ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              wr_en,
  input  logic [RW-1:0]     wr_row,
  input  word_t             wr_data,
  input  logic [RW-1:0]     rd_row,
  output word_t             rd_data,
  output logic              rd_valid,
  input  query_t            query,
  input  logic [ROWS-1:0]   excl,
  output logic [ROWS-1:0]   match,
  output logic              best_found,
  output logic [RW-1:0]     best_row,
  output logic [DIST_W-1:0] best_dist
);

  word_t            cells [ROWS];
  logic [ROWS-1:0]  valid;

  always_ff @(posedge clk) begin
    if (wr_en)
      cells[wr_row] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      valid <= '0;
    else if (clr)
      valid <= '0;
    else if (wr_en)
      valid[wr_row] <= 1'b1;
  end

  assign rd_data  = cells[rd_row];
  assign rd_valid = valid[rd_row];

  logic [ROWS-1:0][DIST_W-1:0] mis_cnt;

  always_comb begin
    for (int unsigned r = 0; r < ROWS; r++) begin
      word_t mis;
      mis      = (cells[r] ^ query.data) & ~query.dc;
      mis_cnt[r]  = DIST_W'($countones(mis));
      match[r] = valid[r] && (mis == '0);
    end
  end

  best_match_sense #(.N(ROWS), .DW(DIST_W)) u_best (
    .mis_cnt (mis_cnt),
    .elig (valid & ~excl),
    .found(best_found),
    .idx  (best_row),
    .best (best_dist)
  );

endmodule
