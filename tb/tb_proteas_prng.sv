// tb_proteas_prng: self-checking test of the seeded xorshift32 generator.
//
// Checks the reset value, the published first outputs for seed 1
// (270369, then 67634689), 2000 steps against an independent model,
// holding when advance is low, seed_load taking priority over advance, and
// the zero-seed substitute. Ends with the TB_RESULT line.
module tb_proteas_prng;
  logic        clk = 1'b0;
  logic        rst_n;
  logic        seed_load;
  logic [31:0] seed;
  logic        advance;
  logic [31:0] rnd;
  int checks = 0;
  int failures = 0;

  proteas_prng dut (.*);

  always #5 clk = ~clk;

  function automatic logic [31:0] model_step(input logic [31:0] x);
    logic [31:0] t;
    t = x;
    t = t ^ {t[18:0], 13'b0};
    t = t ^ {17'b0, t[31:17]};
    t = t ^ {t[26:0], 5'b0};
    return t;
  endfunction

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] m;
    rst_n = 1'b0; seed_load = 1'b0; seed = '0; advance = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check(rnd, 32'h2545_F491, "reset value");

    // Seed 1: known xorshift32 sequence.
    seed_load = 1'b1; seed = 32'd1; advance = 1'b1;
    @(posedge clk); #1;
    seed_load = 1'b0;
    check(rnd, 32'd1, "seed load wins over advance");
    @(posedge clk); #1;
    check(rnd, 32'd270369, "first output of seed 1");
    @(posedge clk); #1;
    check(rnd, 32'd67634689, "second output of seed 1");

    // Long run against the model, with random pauses.
    m = rnd;
    for (int i = 0; i < 2000; i++) begin
      advance = ($urandom_range(0, 3) != 0);
      @(posedge clk); #1;
      if (advance) m = model_step(m);
      check(rnd, m, "sequence");
    end
    advance = 1'b0;

    // Holding
    repeat (5) @(posedge clk);
    #1 check(rnd, m, "hold without advance");

    // Zero seed replaced
    seed_load = 1'b1; seed = '0;
    @(posedge clk); #1;
    seed_load = 1'b0;
    check(rnd, 32'h2545_F491, "zero seed substitute");

    // Arbitrary seed then a step
    seed_load = 1'b1; seed = 32'hDEAD_BEEF;
    @(posedge clk); #1;
    seed_load = 1'b0; advance = 1'b1;
    @(posedge clk); #1;
    advance = 1'b0;
    check(rnd, model_step(32'hDEAD_BEEF), "step after new seed");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
