// group_count_tracker_tb: drives random writes and overwrites of a 64-entry
// priority memory (kept in the testbench) and compares all C(g_i) with
// counts recomputed from that memory by dividing each value by Vmax/m.
// Runs several (m, Vmax/m) settings, including values on group boundaries
// and above Vmax, and clear.
module group_count_tracker_tb;
  import amper_pkg::*;
  localparam int G = 20, E = 64;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, upd_en = 1'b0, old_valid = 1'b0;
  logic [4:0] cfg_m = 5'd5;
  word_t cfg_gw = 32'd100, old_val = '0, new_val = '0;
  logic [G-1:0][13:0] counts;
  int checks = 0, failures = 0;

  group_count_tracker #(.MAX_GROUPS(G), .CW(14)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  word_t mem [E];
  bit    vld [E];

  task automatic compare();
    int ec [G];
    int g;
    for (int i = 0; i < G; i++) ec[i] = 0;
    for (int e = 0; e < E; e++) if (vld[e]) begin
      g = int'(mem[e] / cfg_gw);
      if (g > int'(cfg_m) - 1) g = int'(cfg_m) - 1;
      ec[g]++;
    end
    for (int i = 0; i < G; i++) begin
      checks++;
      if (int'(counts[i]) != ec[i]) begin failures++; $display("FAIL m=%0d gw=%0d C(g%0d)=%0d exp %0d", cfg_m, cfg_gw, i, counts[i], ec[i]); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < 6; s++) begin
      cfg_m  = (s == 0) ? 5'd5 : (s == 1) ? 5'd20 : (s == 2) ? 5'd1 : 5'(1 + $urandom % 20);
      cfg_gw = (s == 0) ? 32'd100 : 32'(1 + $urandom % 5000);
      @(negedge clk); clear = 1'b1; @(negedge clk); clear = 1'b0;
      for (int e = 0; e < E; e++) vld[e] = 0;
      compare();
      for (int i = 0; i < 600; i++) begin
        int e;
        word_t v;
        e = $urandom % E;
        case ($urandom % 4)
          0: v = cfg_gw * ($urandom % (cfg_m + 1));           // on a boundary
          1: v = cfg_gw * cfg_m + $urandom % 1000;            // above Vmax
          default: v = $urandom % (cfg_gw * cfg_m);
        endcase
        @(negedge clk);
        upd_en = 1'b1; old_valid = vld[e]; old_val = mem[e]; new_val = v;
        @(negedge clk);
        upd_en = 1'b0;
        mem[e] = v; vld[e] = 1'b1;
        if (i % 10 == 0) compare();
      end
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
