// amper_ref_model.svh: reference model of the AMPER accelerator, included
// inside the testbench modules.
//
// Re-computes, from a shadow copy of the stored priorities, what one
// sampling run must produce: the random words of the 32-bit LFSR, V(g_i),
// the frNN prefix queries or the kNN subset sizes N_i and neighbours, the
// candidate set (with the depth limit), the sampled words, the number of
// TCAM searches and the run length in cycles. It is written from the
// algorithm, not from the RTL: group counts are recomputed by division,
// best matches by scanning all entries, LFSR steps bit by bit.

  function automatic logic [31:0] lfsr_step(logic [31:0] s);
    logic [31:0] n;
    for (int i = 0; i < 31; i++) n[i] = s[i+1];
    n[31] = 1'b0;
    if (s[0]) begin
      n[31] = ~n[31]; n[21] = ~n[21]; n[1] = ~n[1]; n[0] = ~n[0];
    end
    return n;
  endfunction

  function automatic logic [31:0] mulq(logic [31:0] a, logic [31:0] b, int frac, bit rnd);
    logic [127:0] f;
    f = 128'(a) * 128'(b);
    if (rnd && frac > 0) f += 128'(1) << (frac - 1);
    f = f >> frac;
    return (f > 128'hFFFF_FFFF) ? 32'hFFFF_FFFF : f[31:0];
  endfunction

  class amper_model;
    int            n_entries, csb_depth;
    logic [31:0]   mem [];
    bit            vld [];
    logic [31:0]   lfsr;
    // results of the last run
    int            csp_addr [$];
    logic [31:0]   csp_prio [$];
    int            smp_addr [$];
    logic [31:0]   smp_prio [$];
    bit            overflow, exhausted;
    int            searches, cycles;
    int            dc_queries, exact_queries, multi_knn;

    function new(int n, int depth, logic [31:0] seed);
      n_entries = n; csb_depth = depth; lfsr = seed;
      mem = new[n]; vld = new[n];
      foreach (vld[i]) begin vld[i] = 0; mem[i] = '0; end
    endfunction

    function void write(int a, logic [31:0] v);
      mem[a] = v; vld[a] = 1;
    endfunction

    function int group_count(int g, int m, logic [31:0] gw);
      int c = 0, k;
      for (int e = 0; e < n_entries; e++) if (vld[e]) begin
        k = int'(mem[e] / gw);
        if (k > m - 1) k = m - 1;
        if (k == g) c++;
      end
      return c;
    endfunction

    function void push(int a);
      if (csp_addr.size() < csb_depth) begin
        csp_addr.push_back(a); csp_prio.push_back(mem[a]);
      end else overflow = 1;
    endfunction

    // mode: 0 kNN, 1 frNN
    function void run(bit mode, int m, logic [31:0] gw, logic [31:0] lam,
                      logic [31:0] lampm, int batch);
      logic [31:0] lo, v, delta, mask, n_i, t;
      bit chosen [];
      int best, bd, d;
      csp_addr.delete(); csp_prio.delete(); smp_addr.delete(); smp_prio.delete();
      overflow = 0; exhausted = 0; searches = 0; cycles = 0;
      dc_queries = 0; exact_queries = 0; multi_knn = 0;
      chosen = new[n_entries];
      lo = '0;
      for (int g = 0; g < m; g++) begin
        v = lo + mulq(lfsr, gw, 32, 1);
        lfsr = lfsr_step(lfsr);
        if (mode) begin
          int offered = 0;
          delta = mulq(v, lampm, 16, 1);
          mask = '0;
          for (int b = 31; b >= 0; b--) if (delta[b]) begin
            mask = (b == 31) ? '1 : ((32'd1 << (b + 1)) - 1); break;
          end
          if (mask != 0) dc_queries++; else exact_queries++;
          searches++;
          for (int e = 0; e < n_entries; e++)
            if (vld[e] && ((mem[e] & ~mask) == (v & ~mask))) begin
              push(e); offered++;
            end
          cycles += 5 + offered;
        end else begin
          int s = 0;
          t   = mulq(v, 32'(group_count(g, m, gw)) << 16, 16, 1);
          n_i = mulq(t, lam, 16, 1);
          if (n_i > 1) multi_knn++;
          foreach (chosen[i]) chosen[i] = 0;
          for (logic [31:0] k = 0; k < n_i; k++) begin
            best = -1; bd = 99;
            for (int e = 0; e < n_entries; e++) if (vld[e] && !chosen[e]) begin
              d = $countones(mem[e] ^ v);
              if (d < bd) begin bd = d; best = e; end
            end
            s++;
            if (best < 0) begin exhausted = 1; break; end
            chosen[best] = 1;
            push(best);
          end
          searches += s;
          cycles += 6 + s;
        end
        lo = lo + gw;
      end
      if (csp_addr.size() == 0) cycles += 2;
      else begin
        for (int j = 0; j < batch; j++) begin
          int p;
          p = int'(mulq(lfsr, 32'(csp_addr.size()), 32, 0));
          lfsr = lfsr_step(lfsr);
          smp_addr.push_back(csp_addr[p]); smp_prio.push_back(csp_prio[p]);
        end
        cycles += batch + 2;
      end
    endfunction
  endclass

