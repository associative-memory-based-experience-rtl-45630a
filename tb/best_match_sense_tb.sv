// best_match_sense_tb: random mismatch counts and eligibility masks against a
// reference that sorts by (count, index); includes no-eligible-row and
// all-tied cases.
module best_match_sense_tb;
  localparam int N = 64, DW = 6;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0][DW-1:0] mis_cnt;
  logic [N-1:0] elig;
  logic found;
  logic [5:0] idx;
  logic [DW-1:0] best;

  best_match_sense #(.N(N), .DW(DW)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_now();
    int e_idx, e_best;
    bit e_found;
    e_found = 0; e_idx = 0; e_best = 999;
    for (int r = N - 1; r >= 0; r--)
      if (elig[r] && int'(mis_cnt[r]) <= e_best) begin
        e_found = 1; e_idx = r; e_best = int'(mis_cnt[r]);
      end
    #1;
    checks++;
    if (found !== e_found || (e_found && (int'(idx) != e_idx || int'(best) != e_best))) begin
      failures++;
      $display("FAIL found %0d idx %0d best %0d, expected %0d %0d %0d", found, idx, best, e_found, e_idx, e_best);
    end
  endtask

  initial begin
    for (int r = 0; r < N; r++) mis_cnt[r] = DW'(7);
    elig = '0;
    check_now();
    elig = '1;
    check_now();
    checks++; if (idx !== 0) begin failures++; $display("FAIL tie not lowest"); end
    for (int i = 0; i < 3000; i++) begin
      for (int r = 0; r < N; r++) mis_cnt[r] = DW'($urandom % 33);
      elig = {$urandom, $urandom};
      if (i % 5 == 0) elig = elig & {$urandom, $urandom} & {$urandom, $urandom};
      check_now();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
