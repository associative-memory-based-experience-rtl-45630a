// tcam_array_tb: checks one 64-row TCAM array. First the printed example:
// rows 1010, 1111, 0011, 0110, 1011 searched with 10xx match rows 0 and 4
// only. Then random writes (including overwrites) and random ternary
// queries against a reference memory: exact-match vector, best match with a
// random exclusion mask (fewest mismatching bits, lowest row on ties), the
// read port, the valid bits of never-written rows and clr.
module tcam_array_tb;
  import amper_pkg::*;
  localparam int ROWS = 64;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, wr_en = 1'b0;
  logic [5:0] wr_row = '0, rd_row = '0, best_row;
  word_t wr_data = '0, rd_data;
  logic rd_valid, best_found;
  query_t query = '0;
  logic [ROWS-1:0] excl = '0, match;
  logic [DIST_W-1:0] best_dist;
  int checks = 0, failures = 0;

  tcam_array #(.ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t ref_mem [ROWS];
  bit    ref_v   [ROWS];

  task automatic write(int r, word_t d);
    @(negedge clk);
    wr_en = 1'b1; wr_row = 6'(r); wr_data = d;
    @(negedge clk);
    wr_en = 1'b0;
    ref_mem[r] = d; ref_v[r] = 1'b1;
  endtask

  task automatic search_check();
    logic [ROWS-1:0] em;
    int eb, ed, dd;
    bit ef;
    #1;
    ef = 0; eb = 0; ed = 99;
    for (int r = 0; r < ROWS; r++) begin
      dd = $countones((ref_mem[r] ^ query.data) & ~query.dc);
      em[r] = ref_v[r] && dd == 0;
      if (ref_v[r] && !excl[r] && dd < ed) begin ef = 1; eb = r; ed = dd; end
    end
    checks += 2;
    if (match !== em) begin failures++; $display("FAIL match %h exp %h", match, em); end
    if (best_found !== ef || (ef && (int'(best_row) != eb || int'(best_dist) != ed))) begin
      failures++; $display("FAIL best %0d/%0d/%0d exp %0d/%0d/%0d", best_found, best_row, best_dist, ef, eb, ed);
    end
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) begin ref_v[r] = 0; ref_mem[r] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    write(0, 32'b1010); write(1, 32'b1111); write(2, 32'b0011); write(3, 32'b0110); write(4, 32'b1011);
    query.data = 32'b1011; query.dc = 32'b0011;   // 10xx after the OR gates
    search_check();
    checks++;
    if (match !== 64'b1_0001) begin failures++; $display("FAIL printed example %b", match[4:0]); end
    query.dc = '0; query.data = 32'b1000;          // best match: rows 0 (1 bit) and 4 (2 bits)
    search_check();
    checks++; if (best_row !== 6'd0 || best_dist !== 6'd1) begin failures++; $display("FAIL best example"); end
    excl = 64'b1;
    search_check();
    checks++; if (best_row !== 6'd4) begin failures++; $display("FAIL excluded best"); end
    excl = '0;
    for (int i = 0; i < 3000; i++) begin
      if ($urandom % 2) write($urandom % ROWS, ($urandom % 4 == 0) ? (ref_mem[$urandom % ROWS] ^ (32'd1 << ($urandom % 32))) : $urandom);
      query.data = (i % 3 == 0) ? ref_mem[$urandom % ROWS] : $urandom;
      query.dc   = ($urandom % 2) ? ((32'd1 << ($urandom % 32)) - 1) : '0;
      excl       = ($urandom % 2) ? {$urandom, $urandom} : '0;
      rd_row     = 6'($urandom % ROWS);
      search_check();
      checks += 1;
      if (rd_valid !== ref_v[rd_row] || (ref_v[rd_row] && rd_data !== ref_mem[rd_row])) begin
        failures++; $display("FAIL read row %0d", rd_row);
      end
    end
    // clr clears valid bits
    @(negedge clk); clr = 1'b1; @(negedge clk); clr = 1'b0;
    for (int r = 0; r < ROWS; r++) ref_v[r] = 0;
    search_check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
