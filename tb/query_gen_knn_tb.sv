// query_gen_knn_tb: checks N_i = round(lambda * V * C) against reference
// arithmetic, that exactly N_i queries equal to V (no don't-care bits) are
// emitted under a random ready pattern, the latency (first query three
// cycles after start), the done pulse, N_i = 0 and flush. Includes the
// printed example N_i = 00000100 for V = 10101010.
module query_gen_knn_tb;
  import amper_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, flush = 1'b0;
  logic q_valid, q_ready = 1'b0, busy, done;
  word_t v = '0, cnt = '0, lambda = '0, n_out;
  query_t query;
  int checks = 0, failures = 0;

  query_gen_knn dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t ref_n(word_t x, word_t c, word_t l);
    logic [127:0] t;
    t = 128'(x) * 128'(c);
    if (t > 128'hFFFF_FFFF) t = 128'hFFFF_FFFF;
    t = (t * 128'(l) + 128'(32768)) >> 16;
    return (t > 128'hFFFF_FFFF) ? '1 : t[31:0];
  endfunction

  task automatic run(word_t x, word_t c, word_t l, int flush_after);
    word_t en;
    int got, cyc, first;
    en = ref_n(x, c, l);
    @(negedge clk);
    v = x; cnt = c; lambda = l; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    got = 0; cyc = 1; first = -1;
    while (!done) begin
      q_ready = ($urandom % 3) != 0;
      flush   = (flush_after >= 0) && (got == flush_after) && q_valid;
      #1;
      if (q_valid && first < 0) first = cyc;
      if (q_valid && !flush && q_ready) begin
        got++;
        checks++;
        if (query.data !== x || query.dc !== '0) begin failures++; $display("FAIL query %h", query.data); end
      end
      @(negedge clk);
      cyc++;
      if (cyc > 20000) break;
    end
    q_ready = 1'b0; flush = 1'b0;
    checks += 2;
    if (n_out !== en) begin failures++; $display("FAIL N %0d exp %0d", n_out, en); end
    if (flush_after >= 0 && en > word_t'(flush_after)) begin
      if (got != flush_after) begin failures++; $display("FAIL flushed after %0d", got); end
    end else if (word_t'(got) != en) begin
      failures++; $display("FAIL %0d queries, expected %0d", got, en);
    end
    if (en != 0) begin
      checks++;
      if (first != 3) begin failures++; $display("FAIL first query at cycle %0d", first); end
    end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL busy after done"); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // 170 * 10 * 154/65536 = 3.99 -> 4 (N_i = 00000100)
    run(32'b1010_1010, 32'd10, 32'd154, -1);
    checks++; if (n_out !== 32'd4) begin failures++; $display("FAIL example N %0d", n_out); end
    run(32'd100, 32'd3, 32'd10, -1);           // N = 0
    run(32'd5000, 32'd40, 32'd5000, 7);        // flushed after 7
    for (int i = 0; i < 300; i++)
      run($urandom % 5000, $urandom % 200, $urandom % 300, ($urandom % 4 == 0) ? int'($urandom % 10) : -1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
