// amper_accelerator_tb: end-to-end test of the accelerator at reduced size
// (4 arrays x 16 rows = 64 entries, 40-entry candidate buffer, up to 8
// groups, batches up to 16).
//
// A reference model (amper_ref_model.svh) follows every priority write and
// recomputes each sampling run from the algorithm. For every run the test
// compares all sampled {address, priority} words, the candidate-set length,
// the overflow and kNN-exhaustion flags, the number of TCAM searches and
// the run length in cycles, and checks the group counters after writes.
// Runs alternate between kNN and frNN with different m, lambda, lambda'/m
// and batch sizes. The test counts how often each mechanism occurred
// (frNN search with don't-care bits, exact frNN search, kNN with several
// searches, kNN running out of rows, candidate buffer overflow, empty
// candidate set, mode switch, priority update, memory clear) and counts a
// failure for any that never did.
module amper_accelerator_tb;
  import amper_pkg::*;
  `include "amper_ref_model.svh"

  localparam int A = 4, R = 16, NE = A * R, D = 40, G = 8, B = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  mode_e cfg_mode = MODE_KNN;
  logic [3:0] cfg_m = 4'd4;
  word_t cfg_gw = 32'd1000, cfg_lambda = '0, cfg_lambda_pm = '0, seed = '0;
  logic [4:0] cfg_batch = 5'd8;
  logic seed_load = 1'b0, mem_clear = 1'b0, wr_en = 1'b0, start = 1'b0;
  logic [5:0] wr_addr = '0, smp_addr;
  word_t wr_data = '0, smp_prio;
  logic wr_ready, busy, done, smp_valid, csb_overflow, knn_exhausted;
  logic [5:0] csp_len;
  logic [31:0] search_ops;
  logic [G-1:0][6:0] group_counts;

  amper_accelerator #(.ARRAYS(A), .ROWS(R), .CSB_DEPTH(D), .MAX_GROUPS(G), .MAX_BATCH(B)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_dc = 0, n_exact = 0, n_multi = 0, n_exh = 0, n_ovf = 0, n_empty = 0;
  int n_switch = 0, n_update = 0, n_clear = 0, n_knn = 0, n_frnn = 0;
  amper_model mdl;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic write(int a, word_t v);
    @(negedge clk);
    if (mdl.vld[a]) n_update++;
    wr_en = 1'b1; wr_addr = 6'(a); wr_data = v;
    @(negedge clk);
    wr_en = 1'b0;
    mdl.write(a, v);
  endtask

  task automatic clear_mem();
    @(negedge clk);
    mem_clear = 1'b1;
    @(negedge clk);
    mem_clear = 1'b0;
    foreach (mdl.vld[i]) mdl.vld[i] = 0;
    n_clear++;
  endtask

  task automatic check_counts();
    for (int g = 0; g < int'(cfg_m); g++)
      chk(int'(group_counts[g]) == mdl.group_count(g, int'(cfg_m), cfg_gw),
          $sformatf("C(g%0d) = %0d, expected %0d", g, group_counts[g], mdl.group_count(g, int'(cfg_m), cfg_gw)));
  endtask

  mode_e last_mode = MODE_KNN;
  bit    first_run = 1;

  // m used to group the stored priorities (kNN runs must use it)
  int mem_m = 4;

  task automatic run(mode_e mode, int m, word_t lam, word_t lampm, int batch);
    int cyc, ns;
    word_t got_prio [$];
    int    got_addr [$];
    cfg_mode = mode; cfg_m = 4'(m); cfg_lambda = lam; cfg_lambda_pm = lampm; cfg_batch = 5'(batch);
    mdl.run(mode == MODE_FRNN, m, cfg_gw, lam, lampm, batch);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done && cyc < 100000) begin
      if (smp_valid) begin got_addr.push_back(int'(smp_addr)); got_prio.push_back(smp_prio); end
      @(negedge clk);
      cyc++;
    end
    if (smp_valid) begin got_addr.push_back(int'(smp_addr)); got_prio.push_back(smp_prio); end
    cfg_m = 4'(mem_m);
    ns = mdl.smp_addr.size();
    chk(got_addr.size() == ns, $sformatf("%0d samples, expected %0d", got_addr.size(), ns));
    for (int j = 0; j < ns && j < got_addr.size(); j++)
      chk(got_addr[j] == mdl.smp_addr[j] && got_prio[j] == mdl.smp_prio[j],
          $sformatf("sample %0d: %0d/%0d, expected %0d/%0d", j, got_addr[j], got_prio[j], mdl.smp_addr[j], mdl.smp_prio[j]));
    chk(int'(csp_len) == mdl.csp_addr.size(), $sformatf("mode %0d m %0d: CSP length %0d, expected %0d", mode, m, csp_len, mdl.csp_addr.size()));
    chk(csb_overflow == mdl.overflow, "overflow flag");
    chk(knn_exhausted == mdl.exhausted, "kNN exhausted flag");
    chk(int'(search_ops) == mdl.searches, $sformatf("%0d searches, expected %0d", search_ops, mdl.searches));
    chk(cyc - 1 == mdl.cycles, $sformatf("run took %0d cycles, expected %0d", cyc - 1, mdl.cycles));
    if (mode == MODE_FRNN) n_frnn++; else n_knn++;
    if (!first_run && mode != last_mode) n_switch++;
    first_run = 0; last_mode = mode;
    n_dc    += mdl.dc_queries;
    n_exact += mdl.exact_queries;
    n_multi += mdl.multi_knn;
    n_exh   += mdl.exhausted;
    n_ovf   += mdl.overflow;
    n_empty += (mdl.csp_addr.size() == 0);
  endtask

  initial begin
    mdl = new(NE, D, 32'hACE1_2468);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    chk(wr_ready && !busy, "idle after reset");
    // empty memory: empty candidate set
    run(MODE_FRNN, 4, '0, 32'd1000, 8);
    // fill: priorities in [0, Vmax), Vmax = m * gw = 4000
    for (int e = 0; e < NE; e++) write(e, $urandom % 4000);
    check_counts();
    for (int i = 0; i < 20; i++) write($urandom % NE, $urandom % 4000);   // updates
    check_counts();
    // kNN, small lambda (a few neighbours per group)
    run(MODE_KNN, 4, 32'd3, '0, 8);
    // frNN with typical radius
    run(MODE_FRNN, 4, '0, 32'd3277, 16);
    // frNN, lambda'/m = 0: exact searches only
    run(MODE_FRNN, 4, '0, 32'd0, 5);
    // kNN with large lambda: more neighbours than rows, CSB overflow
    run(MODE_KNN, 4, 32'd2000, '0, 16);
    // frNN with huge radius: every entry matches, overflow
    run(MODE_FRNN, 4, '0, 32'd60000, 16);
    for (int i = 0; i < 30; i++) begin
      if (i % 3 == 0) write($urandom % NE, $urandom % 4000);
      if ($urandom % 2)
        run(MODE_KNN, mem_m, $urandom % 40, '0, 1 + $urandom % B);
      else
        run(MODE_FRNN, 1 + $urandom % 4, '0, $urandom % 20000, 1 + $urandom % B);
    end
    // new grouping: clear memory, m = 8, gw = 500, refill
    clear_mem();
    mem_m = 8; cfg_m = 4'd8; cfg_gw = 32'd500;
    #1;
    check_counts();
    for (int e = 0; e < NE; e++) write(e, ($urandom % 4) == 0 ? 32'd0 : $urandom % 4000);
    check_counts();
    for (int i = 0; i < 20; i++) begin
      if ($urandom % 2)
        run(MODE_KNN, 8, $urandom % 20, '0, 1 + $urandom % B);
      else
        run(MODE_FRNN, 8, '0, $urandom % 40000, 1 + $urandom % B);
    end
    // reseed and repeat a run
    @(negedge clk); seed = 32'h0BAD_F00D; seed_load = 1'b1; @(negedge clk); seed_load = 1'b0;
    mdl.lfsr = 32'h0BAD_F00D;
    run(MODE_FRNN, 8, '0, 32'd3277, 16);

    $display("MECH frnn_runs=%0d knn_runs=%0d dontcare_query=%0d exact_query=%0d knn_multi_search=%0d knn_exhausted=%0d csb_overflow=%0d empty_csp=%0d mode_switch=%0d priority_update=%0d mem_clear=%0d",
             n_frnn, n_knn, n_dc, n_exact, n_multi, n_exh, n_ovf, n_empty, n_switch, n_update, n_clear);
    chk(n_frnn > 0, "no frNN run");
    chk(n_knn > 0, "no kNN run");
    chk(n_dc > 0, "no frNN query with don't-care bits");
    chk(n_exact > 0, "no exact frNN query");
    chk(n_multi > 0, "no kNN group with several searches");
    chk(n_exh > 0, "kNN never ran out of rows");
    chk(n_ovf > 0, "CSB never overflowed");
    chk(n_empty > 0, "candidate set never empty");
    chk(n_switch > 0, "no mode switch");
    chk(n_update > 0, "no priority update");
    chk(n_clear > 0, "no memory clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
