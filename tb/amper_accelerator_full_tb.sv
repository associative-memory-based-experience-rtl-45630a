// amper_accelerator_full_tb: one complete sampling operation of each variant
// on the accelerator at its full size (128 arrays x 64 rows = 8192 entries,
// 8000-entry candidate buffer, m = 20 groups, batch 64).
//
// All 8192 entries are written with random priorities in [0, Vmax),
// Vmax = 2^12, and the group counters are checked. Then an frNN run and a
// kNN run are made with scaling factors that give a candidate set of
// roughly 15 % of the memory, the setting of the latency study
// (lambda = 5/2^16, lambda'/m = 655/2^16). Every
// sampled word, the candidate-set length, the number of TCAM searches and
// the run length in cycles are compared with the reference model.
module amper_accelerator_full_tb;
  import amper_pkg::*;
  `include "amper_ref_model.svh"

  localparam int NE = 8192, D = 8000;
  localparam word_t VMAX = 32'd1 << 12;

  logic clk = 1'b0, rst_n = 1'b0;
  mode_e cfg_mode = MODE_FRNN;
  logic [4:0] cfg_m = 5'd20;
  word_t cfg_gw = VMAX / 20, cfg_lambda = 32'd5, cfg_lambda_pm = 32'd655, seed = '0;
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
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(mode_e mode);
    int cyc, ns;
    word_t got_prio [$];
    int    got_addr [$];
    cfg_mode = mode;
    mdl.run(mode == MODE_FRNN, 20, cfg_gw, cfg_lambda, cfg_lambda_pm, 64);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done && cyc < 50000) begin
      if (smp_valid) begin got_addr.push_back(int'(smp_addr)); got_prio.push_back(smp_prio); end
      @(negedge clk);
      cyc++;
    end
    if (smp_valid) begin got_addr.push_back(int'(smp_addr)); got_prio.push_back(smp_prio); end
    ns = mdl.smp_addr.size();
    chk(got_addr.size() == ns, $sformatf("%0d samples, expected %0d", got_addr.size(), ns));
    for (int j = 0; j < ns && j < got_addr.size(); j++)
      chk(got_addr[j] == mdl.smp_addr[j] && got_prio[j] == mdl.smp_prio[j],
          $sformatf("sample %0d: %0d/%0d, expected %0d/%0d", j, got_addr[j], got_prio[j], mdl.smp_addr[j], mdl.smp_prio[j]));
    chk(int'(csp_len) == mdl.csp_addr.size(), $sformatf("CSP length %0d, expected %0d", csp_len, mdl.csp_addr.size()));
    chk(csb_overflow == mdl.overflow, "overflow flag");
    chk(int'(search_ops) == mdl.searches, $sformatf("%0d searches, expected %0d", search_ops, mdl.searches));
    chk(cyc - 1 == mdl.cycles, $sformatf("run took %0d cycles, expected %0d", cyc - 1, mdl.cycles));
    $display("INFO mode %s: CSP %0d of %0d entries, %0d searches, %0d cycles",
             mode == MODE_FRNN ? "frNN" : "kNN", csp_len, NE, search_ops, cyc - 1);
  endtask

  initial begin
    mdl = new(NE, D, 32'hACE1_2468);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < NE; e++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_addr = 13'(e); wr_data = $urandom % VMAX;
      mdl.write(e, wr_data);
    end
    @(negedge clk);
    wr_en = 1'b0;
    for (int g = 0; g < 20; g++)
      chk(int'(group_counts[g]) == mdl.group_count(g, 20, cfg_gw), $sformatf("C(g%0d)", g));
    run(MODE_FRNN);
    run(MODE_KNN);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
