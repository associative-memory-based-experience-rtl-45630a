// match_collector_tb: loads random match vectors (empty, full, sparse) into
// a 64-entry collector, drains them with a random ready pattern and checks
// that every set bit comes out exactly once, in increasing order, one per
// accepted cycle, and that busy falls when the vector is empty.
module match_collector_tb;
  localparam int N = 64;
  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, out_ready = 1'b0;
  logic [N-1:0] match_in = '0;
  logic out_valid, busy;
  logic [5:0] out_idx;
  int checks = 0, failures = 0;

  match_collector #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(logic [N-1:0] v);
    int exp_i, got;
    @(negedge clk);
    load = 1'b1; match_in = v;
    @(negedge clk);
    load = 1'b0; match_in = ~v;
    exp_i = 0; got = 0;
    for (int cyc = 0; cyc < 4 * N + 10; cyc++) begin
      out_ready = ($urandom % 4) != 0;
      #1;
      while (exp_i < N && !v[exp_i]) exp_i++;
      checks++;
      if (exp_i >= N) begin
        if (out_valid || busy) begin failures++; $display("FAIL still valid"); end
        break;
      end
      if (!out_valid || int'(out_idx) != exp_i) begin
        failures++; $display("FAIL idx %0d exp %0d", out_idx, exp_i); break;
      end
      if (out_ready) begin exp_i++; got++; end
      @(negedge clk);
    end
    out_ready = 1'b0;
    checks++;
    if (got != $countones(v)) begin failures++; $display("FAIL %0d of %0d", got, $countones(v)); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1;
    checks++; if (busy) begin failures++; $display("FAIL busy after reset"); end
    run('0);
    run('1);
    run(64'h8000_0000_0000_0001);
    for (int i = 0; i < 500; i++) run({$urandom, $urandom} & {$urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
