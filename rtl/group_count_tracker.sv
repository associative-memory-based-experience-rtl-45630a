// group_count_tracker: keeps C(g_i), the number of stored priorities per group.
//
// The kNN variant needs the count of priorities in every group range
// [i*Vmax/m, (i+1)*Vmax/m]. On each priority write (upd_en) the group of the
// new value is incremented and, if the row held a value before (old_valid),
// the group of the replaced value is decremented, both at the same edge.
// The group of a value v is the number of boundaries k*gw (k = 1..m-1, gw =
// Vmax/m) with v >= k*gw: a value on a boundary goes to the upper group and
// values above Vmax to group m-1. Counts refer to the m and gw configured
// when the values were written; `clear` zeroes them. The paper only states
// that this counting circuitry is needed; this structure is the simplest
// that does it.
module group_count_tracker
  import amper_pkg::*;
#(
  parameter int unsigned MAX_GROUPS = 20,
  parameter int unsigned CW         = 14,
  localparam int unsigned MW        = $clog2(MAX_GROUPS + 1),
  localparam int unsigned GW        = $clog2(MAX_GROUPS)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic [MW-1:0]              cfg_m,
  input  word_t                      cfg_gw,
  input  logic                       upd_en,
  input  logic                       old_valid,
  input  word_t                      old_val,
  input  word_t                      new_val,
  output logic [MAX_GROUPS-1:0][CW-1:0] counts
);

  function automatic logic [GW-1:0] group_of(word_t val, logic [MW-1:0] m, word_t gw);
    logic [GW-1:0] g;
    logic [Q:0]    bound;
    g = '0;
    for (int unsigned k = 1; k < MAX_GROUPS; k++) begin
      bound = (Q+1)'(k) * (Q+1)'(gw);
      if (MW'(k) < m && (Q+1)'(val) >= bound)
        g = GW'(k);
    end
    return g;
  endfunction

  logic [GW-1:0] g_new, g_old;
  assign g_new = group_of(new_val, cfg_m, cfg_gw);
  assign g_old = group_of(old_val, cfg_m, cfg_gw);

  logic [MAX_GROUPS-1:0] inc, dec;
  always_comb begin
    for (int unsigned i = 0; i < MAX_GROUPS; i++) begin
      inc[i] = (g_new == GW'(i));
      dec[i] = old_valid && (g_old == GW'(i));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      counts <= '0;
    end else if (clear) begin
      counts <= '0;
    end else if (upd_en) begin
      for (int unsigned i = 0; i < MAX_GROUPS; i++) begin
        if (inc[i] && !dec[i])      counts[i] <= counts[i] + 1'b1;
        else if (dec[i] && !inc[i]) counts[i] <= counts[i] - 1'b1;
      end
    end
  end

endmodule
