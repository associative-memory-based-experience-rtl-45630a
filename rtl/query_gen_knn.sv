// query_gen_knn: query generator of the kNN variant.
//
// For a group g_i it computes the subset size N_i = round(lambda * V * C)
// (Eq. 1) with one Q-bit multiplier used twice: first V * C(g_i), then that
// product times lambda (UQ16.16, rounded). A controller then offers
// V(g_i), with no don't-care bits, as the search query N_i times; each
// accepted query is one best-match TCAM search returning one neighbour.
// Timing: start -> 2 cycles of multiplication -> q_valid held until N_i
// queries have been accepted (q_valid & q_ready), then a one-cycle done.
// N_i = 0 gives done right after the multiplications. `flush` ends the group
// early. Multiplier sharing, the handshake and flush are this design's.
module query_gen_knn
  import amper_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  word_t  v,
  input  word_t  cnt,       // C(g_i)
  input  word_t  lambda,    // UQ(Q-FRAC).FRAC
  input  logic   flush,
  output logic   q_valid,
  input  logic   q_ready,
  output query_t query,
  output word_t  n_out,     // N_i of the current group
  output logic   busy,
  output logic   done
);

  typedef enum logic [1:0] {S_IDLE, S_MUL_VC, S_MUL_L, S_EMIT} state_e;
  state_e state;

  word_t v_q, cnt_q, lam_q, prod_q, remain;
  word_t mul_a, mul_b, mul_p;

  // One multiplier for both steps. In the first, C(g_i) enters as the
  // fixed-point number C.0 (C << FRAC, saturated), so the same rounding
  // multiplier returns the exact integer V * C.
  word_t cnt_fx;
  assign cnt_fx = (|(cnt_q >> (Q - FRAC))) ? '1 : (cnt_q << FRAC);

  always_comb begin
    if (state == S_MUL_VC) begin
      mul_a = v_q;
      mul_b = cnt_fx;
    end else begin
      mul_a = prod_q;
      mul_b = lam_q;
    end
  end

  q_multiplier #(.W(Q), .FRAC(FRAC), .ROUND(1'b1)) u_mul (
    .a(mul_a), .b(mul_b), .p(mul_p)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      v_q    <= '0;
      cnt_q  <= '0;
      lam_q  <= '0;
      prod_q <= '0;
      remain <= '0;
      n_out  <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          v_q   <= v;
          cnt_q <= cnt;
          lam_q <= lambda;
          state <= S_MUL_VC;
        end
        S_MUL_VC: begin
          prod_q <= mul_p;
          state  <= S_MUL_L;
        end
        S_MUL_L: begin
          n_out  <= mul_p;
          remain <= mul_p;
          if (mul_p == '0) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            state <= S_EMIT;
          end
        end
        S_EMIT: begin
          if (flush) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else if (q_ready) begin
            remain <= remain - 1'b1;
            if (remain == word_t'(1)) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign q_valid    = (state == S_EMIT);
  assign query.data = v_q;
  assign query.dc   = '0;
  assign busy       = (state != S_IDLE);

endmodule
