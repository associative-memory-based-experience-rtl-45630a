// candidate_set_buffer_tb: fills a 16-word buffer past its depth and checks
// count, full, the sticky overflow flag, that dropped words do not overwrite
// stored ones, one-cycle reads at random addresses, and clear.
module candidate_set_buffer_tb;
  localparam int D = 16, DW = 45;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, wr_en = 1'b0, rd_en = 1'b0;
  logic [DW-1:0] wr_data = '0, rd_data;
  logic [3:0] rd_addr = '0;
  logic [4:0] count;
  logic full, overflow;
  int checks = 0, failures = 0;

  candidate_set_buffer #(.DEPTH(D), .DW(DW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [DW-1:0] ref_mem [D];

  task automatic fill(int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_data = {$urandom, $urandom};
      if (i < D) ref_mem[i] = wr_data;
    end
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic read_check(int a);
    @(negedge clk);
    rd_en = 1'b1; rd_addr = 4'(a);
    @(negedge clk);
    rd_en = 1'b0;
    checks++;
    if (rd_data !== ref_mem[a]) begin failures++; $display("FAIL read %0d", a); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 20; round++) begin
      int n;
      n = (round == 0) ? D + 5 : int'($urandom % (D + 8));
      @(negedge clk); clear = 1'b1; @(negedge clk); clear = 1'b0;
      checks += 2;
      if (count !== 0 || overflow) begin failures++; $display("FAIL clear"); end
      if (full) begin failures++; $display("FAIL full after clear"); end
      fill(n);
      checks += 3;
      if (int'(count) != ((n < D) ? n : D)) begin failures++; $display("FAIL count %0d for %0d", count, n); end
      if (full !== (n >= D)) begin failures++; $display("FAIL full"); end
      if (overflow !== (n > D)) begin failures++; $display("FAIL overflow %0d for %0d", overflow, n); end
      for (int k = 0; k < ((n < D) ? n : D); k++) read_check(k);
      for (int k = 0; k < 10 && n > 0; k++) read_check($urandom % ((n < D) ? n : D));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
