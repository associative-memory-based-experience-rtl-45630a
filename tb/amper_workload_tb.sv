// amper_workload_tb: replay-memory workloads on the full-size accelerator.
//
// Runs the two memory sizes that fit the default 8192-entry TCAM bank,
// 2000 and 5000 experiences (the CartPole settings). Priorities follow a
// skewed distribution with many small and few large values (the minimum of
// two uniform draws in [0, Vmax), Vmax = 4096). Both variants run with
// m = 20 groups and batches of 64. The scaling factors give a candidate set
// of roughly 15 % of the memory. Each memory gets four requests per
// variant, with a few priority updates between requests, as an agent
// would make after training on a batch.
//
// Checks: every sample, the candidate-set length, the search count and the
// cycle count against the reference model. Also checks that the sampling
// is prioritised: the mean priority of the candidate set and of the samples
// must clearly exceed the plain mean of the memory, which is what uniform
// replay would give. The PER expectation sum(p^2)/sum(p) is printed for
// comparison.
module amper_workload_tb;
  import amper_pkg::*;
  `include "amper_ref_model.svh"

  localparam int NE = 8192, D = 8000;
  localparam word_t VMAX = 32'd4096;

  logic clk = 1'b0, rst_n = 1'b0;
  mode_e cfg_mode = MODE_FRNN;
  logic [4:0] cfg_m = 5'd20;
  word_t cfg_gw = VMAX / 20, cfg_lambda = 32'd7, cfg_lambda_pm = 32'd655, seed = '0;
  logic [6:0] cfg_batch = 7'd64;
  logic seed_load = 1'b0, mem_clear = 1'b0, wr_en = 1'b0, start = 1'b0;
  logic [12:0] wr_addr = '0, smp_addr;
  word_t wr_data = '0, smp_prio;
  logic wr_ready, busy, done, smp_valid, csb_overflow, knn_exhausted;
  logic [12:0] csp_len;
  logic [31:0] search_ops;
  logic [19:0][13:0] group_counts;

  amper_accelerator dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  amper_model mdl;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic word_t skewed();
    word_t a, b;
    a = $urandom % VMAX;
    b = $urandom % VMAX;
    return (a < b) ? a : b;
  endfunction

  task automatic write(int e, word_t v);
    @(negedge clk);
    wr_en = 1'b1; wr_addr = 13'(e); wr_data = v;
    @(negedge clk);
    wr_en = 1'b0;
    mdl.write(e, v);
  endtask

  real smp_sum, smp_n, csp_sum, csp_n;

  task automatic run(mode_e mode);
    int cyc, ns, k;
    cfg_mode = mode;
    mdl.run(mode == MODE_FRNN, 20, cfg_gw, cfg_lambda, cfg_lambda_pm, 64);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1; k = 0;
    ns = mdl.smp_addr.size();
    while (!done && cyc < 50000) begin
      if (smp_valid) begin
        chk(k < ns && int'(smp_addr) == mdl.smp_addr[k] && smp_prio == mdl.smp_prio[k], $sformatf("sample %0d", k));
        smp_sum += real'(smp_prio); smp_n += 1.0; k++;
      end
      @(negedge clk);
      cyc++;
    end
    if (smp_valid) begin
      chk(k < ns && int'(smp_addr) == mdl.smp_addr[k] && smp_prio == mdl.smp_prio[k], $sformatf("sample %0d", k));
      smp_sum += real'(smp_prio); smp_n += 1.0; k++;
    end
    chk(k == ns, $sformatf("%0d samples, expected %0d", k, ns));
    chk(int'(csp_len) == mdl.csp_addr.size(), $sformatf("CSP length %0d, expected %0d", csp_len, mdl.csp_addr.size()));
    chk(int'(search_ops) == mdl.searches, "search count");
    chk(cyc - 1 == mdl.cycles, $sformatf("run took %0d cycles, expected %0d", cyc - 1, mdl.cycles));
    foreach (mdl.csp_prio[i]) begin csp_sum += real'(mdl.csp_prio[i]); csp_n += 1.0; end
  endtask

  initial begin
    int sizes [2] = '{2000, 5000};
    mdl = new(NE, D, 32'hACE1_2468);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    foreach (sizes[s]) begin
      int n;
      real p_sum, p2_sum;
      n = sizes[s];
      @(negedge clk); mem_clear = 1'b1; @(negedge clk); mem_clear = 1'b0;
      foreach (mdl.vld[i]) mdl.vld[i] = 0;
      for (int e = 0; e < n; e++) write(e, skewed());
      for (int v = 0; v < 2; v++) begin
        smp_sum = 0; smp_n = 0; csp_sum = 0; csp_n = 0;
        for (int r = 0; r < 4; r++) begin
          run(v == 0 ? MODE_KNN : MODE_FRNN);
          $display("INFO ER %0d %s: CSP %0d (ratio %0.3f), %0d searches, %0d cycles",
                   n, v == 0 ? "kNN " : "frNN", csp_len, real'(csp_len) / real'(n), search_ops, mdl.cycles);
          for (int u = 0; u < 64; u++) write($urandom % n, skewed());
        end
        p_sum = 0; p2_sum = 0;
        for (int e = 0; e < n; e++) begin p_sum += real'(mdl.mem[e]); p2_sum += real'(mdl.mem[e]) ** 2; end
        $display("INFO ER %0d %s: mean priority %0.1f (uniform replay), PER expectation %0.1f, candidate mean %0.1f, sample mean %0.1f",
                 n, v == 0 ? "kNN " : "frNN", p_sum / n, p2_sum / p_sum, csp_sum / csp_n, smp_sum / smp_n);
        chk(csp_sum / csp_n > 1.15 * p_sum / n, "candidate set not prioritised");
        chk(smp_sum / smp_n > 1.15 * p_sum / n, "samples not prioritised");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
