// tcam_bank_tb: checks a bank of 4 arrays x 8 rows against a reference
// memory of 32 entries: the joined exact-match vector, the global best match
// (fewest mismatching bits over all arrays, lowest address on ties, excluded
// entries skipped) and address decoding of writes and reads.
module tcam_bank_tb;
  import amper_pkg::*;
  localparam int A = 4, R = 8, N = A * R;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, wr_en = 1'b0;
  logic [4:0] wr_addr = '0, rd_addr = '0, best_addr;
  word_t wr_data = '0, rd_data;
  logic rd_valid, best_found;
  query_t query = '0;
  logic [N-1:0] excl = '0, match;
  logic [DIST_W-1:0] best_dist;
  int checks = 0, failures = 0;

  tcam_bank #(.ARRAYS(A), .ROWS(R)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t ref_mem [N];
  bit    ref_v   [N];

  task automatic write(int a, word_t d);
    @(negedge clk);
    wr_en = 1'b1; wr_addr = 5'(a); wr_data = d;
    @(negedge clk);
    wr_en = 1'b0;
    ref_mem[a] = d; ref_v[a] = 1'b1;
  endtask

  task automatic check_all();
    logic [N-1:0] em;
    int eb, ed, dd;
    bit ef;
    #1;
    ef = 0; eb = 0; ed = 99;
    for (int r = 0; r < N; r++) begin
      dd = $countones((ref_mem[r] ^ query.data) & ~query.dc);
      em[r] = ref_v[r] && dd == 0;
      if (ref_v[r] && !excl[r] && dd < ed) begin ef = 1; eb = r; ed = dd; end
    end
    checks += 3;
    if (match !== em) begin failures++; $display("FAIL match %h exp %h", match, em); end
    if (best_found !== ef || (ef && (int'(best_addr) != eb || int'(best_dist) != ed))) begin
      failures++; $display("FAIL best %0d/%0d/%0d exp %0d/%0d/%0d", best_found, best_addr, best_dist, ef, eb, ed);
    end
    if (rd_valid !== ref_v[rd_addr] || (ref_v[rd_addr] && rd_data !== ref_mem[rd_addr])) begin
      failures++; $display("FAIL read %0d", rd_addr);
    end
  endtask

  initial begin
    for (int r = 0; r < N; r++) begin ref_v[r] = 0; ref_mem[r] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    check_all();
    // same value in arrays 1 and 3: both match, best is the lower address
    write(9, 32'h55); write(27, 32'h55); write(30, 32'h54);
    query.data = 32'h55; query.dc = '0;
    check_all();
    checks++; if (best_addr !== 5'd9) begin failures++; $display("FAIL tie across arrays"); end
    excl[9] = 1'b1;
    check_all();
    checks++; if (best_addr !== 5'd27) begin failures++; $display("FAIL exclusion across arrays"); end
    for (int i = 0; i < 3000; i++) begin
      if ($urandom % 2) write($urandom % N, ($urandom % 3 == 0) ? ($urandom & 32'hFF) : $urandom);
      query.data = ($urandom % 2) ? ($urandom & 32'hFF) : $urandom;
      query.dc   = ($urandom % 2) ? ((32'd1 << ($urandom % 32)) - 1) : '0;
      excl       = ($urandom % 2) ? $urandom : '0;
      rd_addr    = 5'($urandom % N);
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
