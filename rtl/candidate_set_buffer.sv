// candidate_set_buffer: the buffer holding the candidate set of priorities.
//
// A DEPTH-word memory filled in order: each wr_en appends wr_data at
// position `count`. When the buffer is full further writes are dropped and
// the sticky `overflow` flag is set until the next `clear`. Reads are
// random access and synchronous: rd_data holds the word at rd_addr one
// cycle after rd_en. `clear` empties the buffer (count = 0) at the next
// edge; the stored words themselves are not erased. The depth follows the
// paper (8000 entries); the word contents, the drop-when-full behaviour and
// the one-cycle read are this design's choices.
module candidate_set_buffer #(
  parameter int unsigned DEPTH = 8000,
  parameter int unsigned DW    = 45,
  localparam int unsigned CW   = $clog2(DEPTH + 1),
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          wr_en,
  input  logic [DW-1:0] wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [DW-1:0] rd_data,
  output logic [CW-1:0] count,
  output logic          full,
  output logic          overflow
);

  logic [DW-1:0] mem [DEPTH];

  assign full = (count == CW'(DEPTH));

  always_ff @(posedge clk) begin
    if (wr_en && !full && !clear)
      mem[AW'(count)] <= wr_data;
    if (rd_en)
      rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count    <= '0;
      overflow <= 1'b0;
    end else if (clear) begin
      count    <= '0;
      overflow <= 1'b0;
    end else if (wr_en) begin
      if (full) overflow <= 1'b1;
      else      count    <= count + 1'b1;
    end
  end

endmodule
