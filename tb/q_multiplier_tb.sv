// q_multiplier_tb: checks the saturating fixed-point multiplier in three
// configurations (UQ16.16 rounded, integer, range scaling with FRAC = 32
// truncated) against 128-bit reference arithmetic, on corner cases and
// random operands.
module q_multiplier_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] a, b, p16, p0, p32;
  q_multiplier #(.W(32), .FRAC(16), .ROUND(1'b1)) u16 (.a(a), .b(b), .p(p16));
  q_multiplier #(.W(32), .FRAC(0),  .ROUND(1'b0)) u0  (.a(a), .b(b), .p(p0));
  q_multiplier #(.W(32), .FRAC(32), .ROUND(1'b0)) u32 (.a(a), .b(b), .p(p32));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ref_mul(logic [31:0] x, logic [31:0] y, int frac, bit rnd);
    logic [127:0] f;
    f = 128'(x) * 128'(y);
    if (rnd && frac > 0) f += 128'(1) << (frac - 1);
    f = f >> frac;
    return (f > 128'hFFFF_FFFF) ? 32'hFFFF_FFFF : f[31:0];
  endfunction

  task automatic one(logic [31:0] x, logic [31:0] y);
    a = x; b = y;
    #1;
    checks += 3;
    if (p16 !== ref_mul(x, y, 16, 1)) begin failures++; $display("FAIL frac16 %h*%h = %h", x, y, p16); end
    if (p0  !== ref_mul(x, y, 0, 0))  begin failures++; $display("FAIL int %h*%h = %h", x, y, p0); end
    if (p32 !== ref_mul(x, y, 32, 0)) begin failures++; $display("FAIL frac32 %h*%h = %h", x, y, p32); end
  endtask

  initial begin
    // 170 * 0.0529 -> Delta 9 (example of the frNN query generator)
    one(32'd170, 32'd3470);
    checks++; if (p16 !== 32'd9) begin failures++; $display("FAIL 170*3470/2^16 = %0d", p16); end
    one(32'd0, 32'hFFFF_FFFF);
    one(32'hFFFF_FFFF, 32'hFFFF_FFFF);
    checks++; if (p0 !== 32'hFFFF_FFFF) begin failures++; $display("FAIL saturation"); end
    one(32'd1, 32'd32768);   // 0.5 rounds up to 1
    checks++; if (p16 !== 32'd1) begin failures++; $display("FAIL round half"); end
    one(32'd1, 32'd32767);
    checks++; if (p16 !== 32'd0) begin failures++; $display("FAIL round below half"); end
    for (int i = 0; i < 3000; i++) begin
      one($urandom, $urandom);
      one($urandom & 32'hFFFF, $urandom);
      one($urandom & 32'hFFF, $urandom & 32'h3FFFF);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
