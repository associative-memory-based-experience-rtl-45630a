// urng_tb: self-checking test of the 32-bit LFSR random number generator.
// Compares the output sequence with a reference model of the polynomial
// x^32 + x^22 + x^2 + x + 1 written as a bit-serial recurrence, checks that
// `next` = 0 holds the state, that seed loading works (zero seed replaced by
// the default), that no zero word appears and that bit 31 is set in about
// half of 20000 words.
module urng_tb;
  logic        clk = 1'b0, rst_n = 1'b0, seed_load = 1'b0, next = 1'b0;
  logic [31:0] seed = '0, rnd;
  int checks = 0, failures = 0;

  urng dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference: shift right; the bit leaving position 0 is fed back into the
  // positions of the polynomial terms x^31, x^21, x^1 and x^0 (bits 31,21,1,0).
  function automatic logic [31:0] ref_step(logic [31:0] s);
    logic fb;
    logic [31:0] n;
    fb = s[0];
    for (int i = 0; i < 31; i++) n[i] = s[i+1];
    n[31] = 1'b0;
    if (fb) begin
      n[31] = ~n[31];
      n[21] = ~n[21];
      n[1]  = ~n[1];
      n[0]  = ~n[0];
    end
    return n;
  endfunction

  task automatic check(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  logic [31:0] model;
  int ones;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(rnd, 32'hACE1_2468, "reset seed");
    model = rnd;
    next  = 1'b1;
    ones  = 0;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      model = ref_step(model);
      if (i < 2000 || i % 97 == 0) check(rnd, model, "sequence");
      if (rnd == '0) begin checks++; failures++; $display("FAIL zero word"); end
      ones += rnd[31];
    end
    checks++;
    if (ones < 9400 || ones > 10600) begin
      failures++; $display("FAIL bit31 balance %0d / 20000", ones);
    end
    // hold
    next = 1'b0;
    model = rnd;
    repeat (3) @(negedge clk);
    check(rnd, model, "hold");
    // seed load
    seed = 32'h1234_5678; seed_load = 1'b1;
    @(negedge clk);
    seed_load = 1'b0;
    check(rnd, 32'h1234_5678, "seed load");
    next = 1'b1;
    @(negedge clk);
    check(rnd, ref_step(32'h1234_5678), "step after seed");
    next = 1'b0;
    seed = '0; seed_load = 1'b1;
    @(negedge clk);
    seed_load = 1'b0;
    check(rnd, 32'hACE1_2468, "zero seed replaced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
