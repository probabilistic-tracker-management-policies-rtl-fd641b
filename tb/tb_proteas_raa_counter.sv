// tb_proteas_raa_counter: self-checking test of the RAA counter.
//
// With the default RFM_TH = 165 and with RFM_TH = 20 (8 mitigations per
// tREFI), random ACT trains must raise rfm_req exactly once per RFM_TH ACTs,
// one cycle after the ACT that reached the threshold, with the count back at
// zero; the count is compared with a model every cycle.
module tb_proteas_raa_counter;
  logic       clk = 1'b0;
  logic       rst_n;
  logic       act;
  logic       rfm1, rfm8;
  logic [7:0] raa1, raa8;
  int checks = 0;
  int failures = 0;

  proteas_raa_counter dut1 (.clk(clk), .rst_n(rst_n), .act(act), .rfm_req(rfm1), .raa(raa1));
  proteas_raa_counter #(.RFM_TH(20)) dut8 (.clk(clk), .rst_n(rst_n), .act(act), .rfm_req(rfm8), .raa(raa8));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m1, m8, n_act, n_rfm1, n_rfm8;
    bit exp1, exp8;
    rst_n = 1'b0; act = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    m1 = 0; m8 = 0; n_act = 0; n_rfm1 = 0; n_rfm8 = 0;
    exp1 = 0; exp8 = 0;
    for (int i = 0; i < 50000; i++) begin
      act = ($urandom_range(0, 3) != 0);
      #1;
      check(rfm1 == exp1 && rfm8 == exp8, "rfm_req timing");
      check(int'(raa1) == m1 && int'(raa8) == m8, "RAA count");
      if (rfm1) n_rfm1++;
      if (rfm8) n_rfm8++;
      exp1 = 0; exp8 = 0;
      if (act) begin
        n_act++;
        m1++; m8++;
        if (m1 == 165) begin m1 = 0; exp1 = 1; end
        if (m8 == 20) begin m8 = 0; exp8 = 1; end
      end
      @(posedge clk);
      #1;
    end
    if (rfm1) n_rfm1++;
    if (rfm8) n_rfm8++;
    act = 1'b0;
    $display("ACTs=%0d RFMs(TH=165)=%0d RFMs(TH=20)=%0d", n_act, n_rfm1, n_rfm8);
    check(n_rfm1 == n_act / 165, "one RFM per 165 ACTs");
    check(n_rfm8 == n_act / 20, "one RFM per 20 ACTs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
