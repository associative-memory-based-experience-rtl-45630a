// amper_accelerator: associative-memory accelerator for AMPER sampling.
//
// The priorities of all experiences in the replay memory are stored, one
// per row, in a bank of TCAM arrays (entry address = experience index). One
// sampling request (`start`) runs the whole AMPER algorithm:
//   for each group g_i, i = 0..m-1:
//     1. the URNG draws V(g_i) uniformly in [i*Vmax/m, (i+1)*Vmax/m];
//     2. the query generator turns V(g_i) into TCAM queries:
//          frNN: one prefix query with don't-care bits covering ~Delta_i,
//          kNN : V(g_i) itself, N_i = round(lambda*V*C(g_i)) times;
//     3. all arrays search in parallel; frNN takes every exact match, kNN
//        takes the best (fewest mismatching bits) row not yet chosen in this
//        group, one per search; the chosen entries go to the candidate set
//        buffer (CSB) as {address, priority};
//   4. finally the URNG draws `batch` uniform addresses into the CSB and the
//      words read there are the sampled experiences (smp_*).
// The dataflow and both variants follow the paper; this sequencer, the
// one-search-per-cycle timing and the host interface are this design's.
//
// Host interface: while idle (wr_ready) a write stores or updates the
// priority of one entry; the group counters C(g_i) follow every write,
// grouped with the cfg_m / cfg_gw present at the write. mem_clear (while
// idle) empties the replay memory: all entries invalid, all C(g_i) zero;
// after changing cfg_m or cfg_gw the priorities are cleared and rewritten.
// Configuration is captured at `start`: cfg_mode (kNN/frNN), cfg_m groups,
// cfg_gw = Vmax/m, cfg_lambda and cfg_lambda_pm = lambda'/m (UQ16.16), and
// cfg_batch (1..MAX_BATCH). cfg_m must be at least 1.
//
// Timing per group: frNN 5 cycles + 1 per match offered to the CSB;
// kNN 6 cycles + 1 per search (N_i searches, or up to the first search that
// finds no row left). Sampling takes batch + 2 cycles (2 if the candidate
// set is empty), then `done` pulses for one cycle. Samples
// appear one per cycle with smp_valid. Candidates beyond CSB_DEPTH are
// dropped and csb_overflow is set for that run.
module amper_accelerator
  import amper_pkg::*;
#(
  parameter int unsigned ARRAYS     = 128,
  parameter int unsigned ROWS       = 64,
  parameter int unsigned CSB_DEPTH  = 8000,
  parameter int unsigned MAX_GROUPS = 20,
  parameter int unsigned MAX_BATCH  = 64,
  localparam int unsigned N   = ARRAYS * ROWS,
  localparam int unsigned AW  = $clog2(N),
  localparam int unsigned MW  = $clog2(MAX_GROUPS + 1),
  localparam int unsigned GW  = $clog2(MAX_GROUPS),
  localparam int unsigned BTW = $clog2(MAX_BATCH + 1),
  localparam int unsigned CW  = $clog2(CSB_DEPTH + 1),
  localparam int unsigned CAW = $clog2(CSB_DEPTH),
  localparam int unsigned GCW = $clog2(N + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // configuration
  input  mode_e           cfg_mode,
  input  logic [MW-1:0]   cfg_m,
  input  word_t           cfg_gw,
  input  word_t           cfg_lambda,
  input  word_t           cfg_lambda_pm,
  input  logic [BTW-1:0]  cfg_batch,
  input  logic            seed_load,
  input  word_t           seed,
  // priority writes / updates
  input  logic            mem_clear,
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_addr,
  input  word_t           wr_data,
  output logic            wr_ready,
  // sampling
  input  logic            start,
  output logic            busy,
  output logic            done,
  output logic            smp_valid,
  output logic [AW-1:0]   smp_addr,
  output word_t           smp_prio,
  // status of the last run
  output logic [CW-1:0]   csp_len,
  output logic            csb_overflow,
  output logic            knn_exhausted,
  output logic [31:0]     search_ops,
  output logic [MAX_GROUPS-1:0][GCW-1:0] group_counts
);

  typedef enum logic [3:0] {
    S_IDLE, S_GEN, S_QG, S_SEARCH, S_DRAIN, S_NEXT, S_SAMPLE, S_FLUSH, S_DONE
  } state_e;

  typedef struct packed {
    logic [AW-1:0] addr;
    word_t         prio;
  } cand_t;

  state_e          state;
  mode_e           mode_q;
  logic [MW-1:0]   m_q;
  word_t           gw_q, lam_q, lampm_q;
  logic [BTW-1:0]  batch_q, smp_cnt;
  logic [GW-1:0]   grp;
  word_t           lo, v_q;
  logic [N-1:0]    chosen;

  // ---------------------------------------------------------------- URNG
  word_t rnd;
  logic  rnd_next;

  urng #(.Q(Q)) u_urng (
    .clk(clk), .rst_n(rst_n), .seed_load(seed_load), .seed(seed),
    .next(rnd_next), .rnd(rnd)
  );

  // V(g_i) = lo_i + round(rnd * gw / 2^Q); CSB address = floor(rnd * len / 2^Q).
  word_t v_off, smp_pos;
  q_multiplier #(.W(Q), .FRAC(Q), .ROUND(1'b1)) u_vscale (
    .a(rnd), .b(gw_q), .p(v_off)
  );
  q_multiplier #(.W(Q), .FRAC(Q), .ROUND(1'b0)) u_sscale (
    .a(rnd), .b(word_t'(csp_len)), .p(smp_pos)
  );

  // ---------------------------------------------------- query generators
  query_t q_frnn, q_knn, query;
  word_t  delta, n_i;
  logic   frnn_start, frnn_valid;
  logic   knn_start, knn_valid, knn_ready, knn_flush, knn_busy, knn_done;

  query_gen_frnn u_qg_frnn (
    .clk(clk), .rst_n(rst_n), .start(frnn_start), .v(v_q),
    .lambda_pm(lampm_q), .query(q_frnn), .delta(delta), .valid(frnn_valid)
  );

  query_gen_knn u_qg_knn (
    .clk(clk), .rst_n(rst_n), .start(knn_start), .v(v_q),
    .cnt(word_t'(group_counts[grp])), .lambda(lam_q), .flush(knn_flush),
    .q_valid(knn_valid), .q_ready(knn_ready), .query(q_knn), .n_out(n_i),
    .busy(knn_busy), .done(knn_done)
  );

  assign query = (mode_q == MODE_FRNN) ? q_frnn : q_knn;

  // ------------------------------------------------------------ TCAM bank
  logic [AW-1:0]     rd_addr, best_addr;
  word_t             rd_data;
  logic              rd_valid, best_found;
  logic [N-1:0]      match;
  logic [DIST_W-1:0] best_dist;
  logic              host_wr;

  assign wr_ready = (state == S_IDLE);
  assign host_wr  = wr_en && wr_ready;

  tcam_bank #(.ARRAYS(ARRAYS), .ROWS(ROWS)) u_bank (
    .clk(clk), .rst_n(rst_n), .clr(mem_clear && wr_ready),
    .wr_en(host_wr), .wr_addr(wr_addr), .wr_data(wr_data),
    .rd_addr(rd_addr), .rd_data(rd_data), .rd_valid(rd_valid),
    .query(query), .excl(chosen), .match(match),
    .best_found(best_found), .best_addr(best_addr), .best_dist(best_dist)
  );

  // ------------------------------------------------------- group counters
  group_count_tracker #(.MAX_GROUPS(MAX_GROUPS), .CW(GCW)) u_cnt (
    .clk(clk), .rst_n(rst_n), .clear(mem_clear && wr_ready), .cfg_m(cfg_m), .cfg_gw(cfg_gw),
    .upd_en(host_wr), .old_valid(rd_valid), .old_val(rd_data),
    .new_val(wr_data), .counts(group_counts)
  );

  // ------------------------------------------------------ match collector
  logic          col_load, col_valid, col_ready, col_busy;
  logic [AW-1:0] col_idx;

  match_collector #(.N(N)) u_col (
    .clk(clk), .rst_n(rst_n), .load(col_load), .match_in(match),
    .out_valid(col_valid), .out_ready(col_ready), .out_idx(col_idx),
    .busy(col_busy)
  );

  // ---------------------------------------------- candidate set buffer
  logic           csb_clear, csb_wr, csb_rd;
  cand_t          csb_wdata, csb_rdata;
  logic [CAW-1:0] csb_raddr;
  logic           csb_full;

  candidate_set_buffer #(.DEPTH(CSB_DEPTH), .DW($bits(cand_t))) u_csb (
    .clk(clk), .rst_n(rst_n), .clear(csb_clear),
    .wr_en(csb_wr), .wr_data(csb_wdata),
    .rd_en(csb_rd), .rd_addr(csb_raddr), .rd_data(csb_rdata),
    .count(csp_len), .full(csb_full), .overflow(csb_overflow)
  );

  // ------------------------------------------------------------ control
  logic knn_hit, knn_miss;
  assign knn_hit  = (state == S_SEARCH) && (mode_q == MODE_KNN) && knn_valid && best_found;
  assign knn_miss = (state == S_SEARCH) && (mode_q == MODE_KNN) && knn_valid && !best_found;

  always_comb begin
    // TCAM read port: replaced value on host writes, else the chosen entry.
    if (state == S_IDLE)        rd_addr = wr_addr;
    else if (state == S_DRAIN)  rd_addr = col_idx;
    else                        rd_addr = best_addr;

    rnd_next   = (state == S_GEN) || (state == S_SAMPLE);
    frnn_start = (state == S_QG) && (mode_q == MODE_FRNN);
    knn_start  = (state == S_QG) && (mode_q == MODE_KNN);
    knn_ready  = knn_hit;
    knn_flush  = knn_miss;
    col_load   = (state == S_SEARCH) && (mode_q == MODE_FRNN) && frnn_valid;
    col_ready  = (state == S_DRAIN);
    csb_clear  = (state == S_IDLE) && start;
    csb_wr     = knn_hit || (col_ready && col_valid);
    csb_wdata  = '{addr: (state == S_DRAIN) ? col_idx : best_addr, prio: rd_data};
    csb_rd     = (state == S_SAMPLE);
    csb_raddr  = CAW'(smp_pos);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      mode_q        <= MODE_KNN;
      m_q           <= '0;
      gw_q          <= '0;
      lam_q         <= '0;
      lampm_q       <= '0;
      batch_q       <= '0;
      smp_cnt       <= '0;
      grp           <= '0;
      lo            <= '0;
      v_q           <= '0;
      chosen        <= '0;
      search_ops    <= '0;
      knn_exhausted <= 1'b0;
      done          <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          mode_q        <= cfg_mode;
          m_q           <= cfg_m;
          gw_q          <= cfg_gw;
          lam_q         <= cfg_lambda;
          lampm_q       <= cfg_lambda_pm;
          batch_q       <= cfg_batch;
          grp           <= '0;
          lo            <= '0;
          search_ops    <= '0;
          knn_exhausted <= 1'b0;
          state         <= S_GEN;
        end
        S_GEN: begin
          v_q    <= lo + v_off;
          chosen <= '0;
          state  <= S_QG;
        end
        S_QG: state <= S_SEARCH;
        S_SEARCH: begin
          if (mode_q == MODE_FRNN) begin
            if (frnn_valid) begin
              search_ops <= search_ops + 1;
              state      <= S_DRAIN;
            end
          end else begin
            if (knn_valid) search_ops <= search_ops + 1;
            if (knn_hit)   chosen[best_addr] <= 1'b1;
            if (knn_miss)  knn_exhausted <= 1'b1;
            if (knn_done)  state <= S_NEXT;
          end
        end
        S_DRAIN: if (!col_busy) state <= S_NEXT;
        S_NEXT: begin
          grp <= grp + 1'b1;
          lo  <= lo + gw_q;
          smp_cnt <= '0;
          if (MW'(grp) + 1'b1 >= m_q) state <= (csp_len == '0) ? S_FLUSH : S_SAMPLE;
          else                        state <= S_GEN;
        end
        S_SAMPLE: begin
          smp_cnt <= smp_cnt + 1'b1;
          if (smp_cnt + 1'b1 >= batch_q) state <= S_FLUSH;
        end
        S_FLUSH: state <= S_DONE;
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Sample output: the CSB word read in the previous cycle.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) smp_valid <= 1'b0;
    else        smp_valid <= csb_rd;
  end
  assign smp_addr = csb_rdata.addr;
  assign smp_prio = csb_rdata.prio;

  assign busy = (state != S_IDLE);

endmodule
