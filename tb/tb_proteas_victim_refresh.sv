// tb_proteas_victim_refresh: self-checking test of the victim-refresh
// sequencer.
//
// For random aggressor rows, and rows at both edges of the bank, the
// sequencer must issue exactly the rows within the blast radius (never the
// aggressor), one per cycle starting the cycle after start, skip rows outside
// the bank, and stay busy for exactly 2*BLAST_RADIUS cycles. Radius 2
// (default) and radius 1 are both tested.
module tb_proteas_victim_refresh;
  localparam int ROW_W = 17;
  localparam int MAXROW = (1 << ROW_W) - 1;

  logic             clk = 1'b0;
  logic             rst_n;
  logic             start;
  logic [ROW_W-1:0] aggr_row;
  logic             busy2, v2, busy1, v1;
  logic [ROW_W-1:0] r2, r1;
  int checks = 0;
  int failures = 0;

  proteas_victim_refresh dut2 (
    .clk(clk), .rst_n(rst_n), .start(start), .aggr_row(aggr_row),
    .busy(busy2), .ref_valid(v2), .ref_row(r2));

  proteas_victim_refresh #(.BLAST_RADIUS(1)) dut1 (
    .clk(clk), .rst_n(rst_n), .start(start), .aggr_row(aggr_row),
    .busy(busy1), .ref_valid(v1), .ref_row(r1));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Issue one mitigation and check both sequencers cycle by cycle.
  task automatic run_one(input int aggr);
    int exp2[4];
    int exp1[2];
    exp2 = '{aggr - 2, aggr - 1, aggr + 1, aggr + 2};
    exp1 = '{aggr - 1, aggr + 1};
    check(!busy2 && !busy1, "idle before start");
    start = 1'b1; aggr_row = ROW_W'(aggr);
    @(posedge clk); #1;
    start = 1'b0; aggr_row = $urandom;
    for (int c = 0; c < 4; c++) begin
      bit in2, in1;
      in2 = (exp2[c] >= 0) && (exp2[c] <= MAXROW);
      check(busy2, "radius-2 busy");
      check(v2 == in2, "radius-2 valid");
      if (in2) check(int'(r2) == exp2[c], "radius-2 victim row");
      if (c < 2) begin
        in1 = (exp1[c] >= 0) && (exp1[c] <= MAXROW);
        check(busy1 && (v1 == in1), "radius-1 busy/valid");
        if (in1) check(int'(r1) == exp1[c], "radius-1 victim row");
      end else begin
        check(!busy1 && !v1, "radius-1 done after 2 cycles");
      end
      @(posedge clk); #1;
    end
    check(!busy2 && !v2, "radius-2 done after 4 cycles");
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; aggr_row = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    #1 check(!busy2 && !v2, "idle after reset");
    run_one(0);
    run_one(1);
    run_one(MAXROW);
    run_one(MAXROW - 1);
    run_one(1000);
    for (int i = 0; i < 2000; i++) begin
      run_one($urandom_range(0, MAXROW));
      repeat ($urandom_range(0, 2)) @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
