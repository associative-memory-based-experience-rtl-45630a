// mask_generator_tb: checks the prefix mask against the printed example
// (Delta 00001001 -> mask 00001111), zero, all-ones and random values, using
// a reference that locates the leftmost 1 with a search loop.
module mask_generator_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [31:0] delta, mask;

  mask_generator #(.W(32)) dut (.delta(delta), .mask(mask));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ref_mask(logic [31:0] d);
    int p;
    p = -1;
    for (int i = 0; i < 32; i++) if (d[i]) p = i;
    if (p < 0) return '0;
    return (p == 31) ? 32'hFFFF_FFFF : ((32'd1 << (p + 1)) - 1);
  endfunction

  task automatic one(logic [31:0] d);
    delta = d;
    #1;
    checks++;
    if (mask !== ref_mask(d)) begin
      failures++;
      $display("FAIL delta %b mask %b", d, mask);
    end
  endtask

  initial begin
    one(32'b0000_1001);
    checks++; if (mask !== 32'b0000_1111) begin failures++; $display("FAIL printed example"); end
    one('0);
    one('1);
    one(32'h8000_0000);
    one(32'h1);
    for (int i = 0; i < 5000; i++) one($urandom >> ($urandom % 32));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
