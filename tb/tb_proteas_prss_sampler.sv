// tb_proteas_prss_sampler: self-checking test of request-stream sampling.
//
// Two samplers run side by side: the default p = 655/65536 (about 1 %) and
// p = 1/2. For every ACT the sampling decision is compared with an
// independent xorshift32 model; over 200,000 ACTs the measured rates are
// checked against p, and sampled/bypassed must be exclusive and complete.
// A seed reload must restart the decision sequence.
module tb_proteas_prss_sampler;
  logic        clk = 1'b0;
  logic        rst_n;
  logic        seed_load;
  logic [31:0] seed;
  logic        act_valid;
  logic        s1, b1, s2, b2;
  int checks = 0;
  int failures = 0;

  proteas_prss_sampler dut1 (
    .clk(clk), .rst_n(rst_n), .seed_load(seed_load), .seed(seed),
    .act_valid(act_valid), .sampled(s1), .bypassed(b1));

  proteas_prss_sampler #(.P_FRAC_W(16), .P_NUM(32768)) dut2 (
    .clk(clk), .rst_n(rst_n), .seed_load(seed_load), .seed(seed),
    .act_valid(act_valid), .sampled(s2), .bypassed(b2));

  always #5 clk = ~clk;

  function automatic logic [31:0] model_step(input logic [31:0] x);
    logic [31:0] t;
    t = x;
    t = t ^ {t[18:0], 13'b0};
    t = t ^ {17'b0, t[31:17]};
    t = t ^ {t[26:0], 5'b0};
    return t;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] m;
    int n_act, n_s1, n_s2;
    bit  first_dec[$];
    rst_n = 1'b0; seed_load = 1'b0; seed = '0; act_valid = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    seed_load = 1'b1; seed = 32'h1234_5678;
    @(posedge clk); #1 seed_load = 1'b0;
    m = 32'h1234_5678;
    n_act = 0; n_s1 = 0; n_s2 = 0;
    for (int i = 0; i < 200000; i++) begin
      act_valid = ($urandom_range(0, 9) != 0);
      #1;
      if (act_valid) begin
        n_act++;
        check(s1 == (m[15:0] < 16'd655), "p=1% decision");
        check(s2 == (m[15:0] < 16'd32768), "p=1/2 decision");
        check((s1 ^ b1) && (s2 ^ b2), "exactly one of sampled/bypassed");
        if (s1) n_s1++;
        if (s2) n_s2++;
        if (i < 64) first_dec.push_back(s2);
      end else begin
        check(!s1 && !b1 && !s2 && !b2, "idle without ACT");
      end
      @(posedge clk);
      if (act_valid) m = model_step(m);
      #1;
    end
    act_valid = 1'b0;
    $display("p=1%%: %0d of %0d sampled; p=1/2: %0d", n_s1, n_act, n_s2);
    // 1 % of ~180,000 is ~1800; allow +-15 %.
    check(n_s1 > n_act / 100 * 85 / 100 && n_s1 < n_act / 100 * 115 / 100, "rate near 1%");
    check(n_s2 > n_act * 48 / 100 && n_s2 < n_act * 52 / 100, "rate near 1/2");

    // Reload the same seed: decisions repeat (p = 1/2 sampler).
    seed_load = 1'b1; seed = 32'h1234_5678;
    @(posedge clk); #1 seed_load = 1'b0;
    m = 32'h1234_5678;
    for (int i = 0; i < 40; i++) begin
      act_valid = 1'b1;
      #1 check(s2 == (m[15:0] < 16'd32768), "decision after reload");
      @(posedge clk);
      m = model_step(m);
      #1;
    end
    act_valid = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
