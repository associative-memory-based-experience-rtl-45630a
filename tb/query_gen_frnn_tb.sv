// query_gen_frnn_tb: checks the prefix-based query generator on the printed
// example (V 10101010, Delta 00001001 -> query 1010xxxx) and on random
// values against a reference Delta = round(lambda'/m * V) and a reference
// mask; checks the one-cycle latency and that the query covers V and the
// range [V & ~mask, V | mask].
module query_gen_frnn_tb;
  import amper_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, valid;
  word_t v = '0, lambda_pm = '0, delta;
  query_t query;
  int checks = 0, failures = 0;

  query_gen_frnn dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t ref_delta(word_t x, word_t l);
    logic [95:0] f;
    f = (96'(x) * 96'(l) + 96'(32768)) >> 16;
    return (f > 96'hFFFF_FFFF) ? '1 : f[31:0];
  endfunction

  function automatic word_t ref_mask(word_t d);
    word_t m = '0;
    for (int i = 31; i >= 0; i--) if (d[i]) begin
      m = (i == 31) ? '1 : ((word_t'(1) << (i + 1)) - 1);
      break;
    end
    return m;
  endfunction

  task automatic run(word_t x, word_t l);
    word_t ed, em;
    @(negedge clk);
    v = x; lambda_pm = l; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    v = $urandom;   // input may change once captured
    ed = ref_delta(x, l);
    em = ref_mask(ed);
    checks += 4;
    if (!valid)             begin failures++; $display("FAIL valid not one cycle after start"); end
    if (delta !== ed)       begin failures++; $display("FAIL delta %0d exp %0d", delta, ed); end
    if (query.dc !== em)    begin failures++; $display("FAIL dc %b exp %b", query.dc, em); end
    if (query.data !== (x | em)) begin failures++; $display("FAIL data %b", query.data); end
    @(negedge clk);
    checks++;
    if (valid) begin failures++; $display("FAIL valid stuck"); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // printed example: 170 * 3470/65536 = 9.0009 -> 9
    run(32'b1010_1010, 32'd3470);
    checks += 3;
    if (delta !== 32'b0000_1001) begin failures++; $display("FAIL example delta %b", delta); end
    if (query.dc !== 32'b0000_1111) begin failures++; $display("FAIL example mask %b", query.dc); end
    if ((query.data & ~query.dc) !== 32'b1010_0000) begin failures++; $display("FAIL example prefix %b", query.data); end
    run(32'd1000, 32'd0);           // Delta 0: exact query
    for (int i = 0; i < 2000; i++) run($urandom >> ($urandom % 24), $urandom % 32'h0004_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
