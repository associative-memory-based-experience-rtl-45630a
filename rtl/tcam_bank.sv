// tcam_bank: the parallel TCAM arrays of the accelerator.
//
// ARRAYS tcam_array instances share one broadcast query, so a single search
// step compares the query with all ARRAYS*ROWS stored priorities. An entry
// address is {array, row}. The exact-match vectors of the arrays are joined
// into one ARRAYS*ROWS vector; for best match each array reports its own
// winner and a second best_match_sense picks the overall winner (lowest
// address on ties). Write and read ports are address-decoded; `clr` invalidates every entry. Search and
// read are combinational, writes happen at the clock edge. The second
// winner-take-all stage is this design's choice.
module tcam_bank
  import amper_pkg::*;
#(
  parameter int unsigned ARRAYS = 128,
  parameter int unsigned ROWS   = 64,
  localparam int unsigned N     = ARRAYS * ROWS,
  localparam int unsigned AW    = $clog2(N),
  localparam int unsigned RW    = $clog2(ROWS),
  localparam int unsigned BW    = (ARRAYS > 1) ? $clog2(ARRAYS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  word_t             wr_data,
  input  logic [AW-1:0]     rd_addr,
  output word_t             rd_data,
  output logic              rd_valid,
  input  query_t            query,
  input  logic [N-1:0]      excl,
  output logic [N-1:0]      match,
  output logic              best_found,
  output logic [AW-1:0]     best_addr,
  output logic [DIST_W-1:0] best_dist
);

  logic [ARRAYS-1:0][DIST_W-1:0] a_dist;
  logic [ARRAYS-1:0]             a_found;
  logic [ARRAYS-1:0][RW-1:0]     a_row;
  word_t                         a_rd   [ARRAYS];
  logic [ARRAYS-1:0]             a_rdv;

  logic [BW-1:0] wr_arr, rd_arr;
  assign wr_arr = BW'(wr_addr >> RW);
  assign rd_arr = BW'(rd_addr >> RW);

  for (genvar a = 0; a < ARRAYS; a++) begin : g_arr
    tcam_array #(.ROWS(ROWS)) u_arr (
      .clk       (clk),
      .rst_n     (rst_n),
      .clr       (clr),
      .wr_en     (wr_en && (wr_arr == BW'(a))),
      .wr_row    (wr_addr[RW-1:0]),
      .wr_data   (wr_data),
      .rd_row    (rd_addr[RW-1:0]),
      .rd_data   (a_rd[a]),
      .rd_valid  (a_rdv[a]),
      .query     (query),
      .excl      (excl[a*ROWS +: ROWS]),
      .match     (match[a*ROWS +: ROWS]),
      .best_found(a_found[a]),
      .best_row  (a_row[a]),
      .best_dist (a_dist[a])
    );
  end

  assign rd_data  = a_rd[rd_arr];
  assign rd_valid = a_rdv[rd_arr];

  logic [BW-1:0] win;

  best_match_sense #(.N(ARRAYS), .DW(DIST_W)) u_merge (
    .mis_cnt (a_dist),
    .elig (a_found),
    .found(best_found),
    .idx  (win),
    .best (best_dist)
  );

  assign best_addr = AW'({win, a_row[win]});

endmodule
