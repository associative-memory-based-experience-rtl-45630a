// match_collector: streams the matches of one search into the CSB.
//
// `load` latches the exact-match vector of a TCAM search. While any latched
// bit is set, a priority encoder offers the lowest matching address on
// out_idx with out_valid; when out_ready is high that bit is cleared, so one
// candidate leaves per cycle, lowest address first. `busy` is high while
// matches remain. A load while busy replaces the remaining matches. The
// one-per-cycle transfer is this design's reading of the paper's remark
// that the candidate set buffer throughput bounds the latency.
module match_collector #(
  parameter int unsigned N  = 8192,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [N-1:0]  match_in,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [AW-1:0] out_idx,
  output logic          busy
);

  logic [N-1:0] pending;

  // Two-level priority encoder: the lowest set bit inside each CH-bit
  // chunk, then the lowest chunk that has one.
  localparam int unsigned CH  = (N < 64) ? N : 64;
  localparam int unsigned NCH = (N + CH - 1) / CH;
  localparam int unsigned CW  = (CH > 1) ? $clog2(CH) : 1;

  logic [NCH*CH-1:0]        padded;
  logic [NCH-1:0]           ch_any;
  logic [NCH-1:0][CW-1:0]   ch_first;

  assign padded = (NCH*CH)'(pending);

  for (genvar c = 0; c < NCH; c++) begin : g_chunk
    always_comb begin
      ch_any[c]   = |padded[c*CH +: CH];
      ch_first[c] = '0;
      for (int i = CH - 1; i >= 0; i--)
        if (padded[c*CH + i]) ch_first[c] = CW'(i);
    end
  end

  always_comb begin
    out_idx = '0;
    for (int c = NCH - 1; c >= 0; c--)
      if (ch_any[c]) out_idx = AW'(c * CH + int'(ch_first[c]));
  end

  assign out_valid = |pending;
  assign busy      = out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      pending <= '0;
    else if (load)
      pending <= match_in;
    else if (out_valid && out_ready)
      pending[out_idx] <= 1'b0;
  end

endmodule
