// tb_proteas_attack_patterns: Rowhammer attack patterns against one bank.
//
// Four bank trackers, one per operating point, see the same activation
// stream; each gets one mitigation request every 165/k ACTs:
//   k1  default sizes, p = 655/65536 (1 %),   one mitigation per 165 ACTs
//       (one per tREFI, the DDR4 operating point);
//   k2  p = 1966/65536 (3 %),  one per 82 ACTs;
//   k4  p = 3277/65536 (5 %),  one per 41 ACTs;
//   k8  p = 6554/65536 (10 %), one per 20 ACTs (eight per tREFI with RFM,
//       the operating point for a threshold of 500).
// Patterns, after the usual TRRespass/Blacksmith formulation:
//   uniform      (r1..rj)^N for j = 2,4,8,16,20,32,40,80,120,140, both
//                continuous and restarted at every tREFI (aligned);
//   non-uniform  [(r1..rj)^X, (d1..dk)]^N for the same ten j, X = 2..5 and
//                k = 5,10,20,32,40,80, both continuous and aligned.
// That is 500 patterns in all.
// Each pattern runs for WINDOW_TREFI refresh intervals of 165 ACTs. The
// disturbance of a target row is the number of ACTs it received since that
// tracker last chose it for mitigation; its maximum over all target rows is
// reported per pattern and tracker. The bounds checked (4800, 2400, 1200 and
// 1000 ACTs for k = 1, 2, 4, 8) are sanity limits with margin, not
// thresholds claimed for the design.
// The test also cross-checks that every mitigated row was really activated,
// and that each tracker's sampled fraction of ACTs is close to its p.
module tb_proteas_attack_patterns;
  import proteas_pkg::*;

  localparam int WINDOW_TREFI = 1024;
  localparam int ACTS_TREFI   = ACTS_PER_TREFI;
  localparam int NK           = 4;
  localparam int K      [NK] = '{1, 2, 4, 8};
  localparam int PNUM   [NK] = '{655, 1966, 3277, 6554};
  localparam int PERIOD [NK] = '{165, 82, 41, 20};
  localparam int BOUND  [NK] = '{4800, 2400, 1200, 1000};
  localparam int MAXROW = 65536;

  logic             clk = 1'b0;
  logic             rst_n;
  logic             act_valid;
  logic [ROW_W-1:0] act_row;
  logic             m_req   [NK];
  logic             m_valid [NK];
  logic             busy    [NK];
  logic [ROW_W-1:0] m_row   [NK];
  logic             smp     [NK];
  int checks = 0;
  int failures = 0;

  for (genvar g = 0; g < NK; g++) begin : g_trk
    logic             byp, hit, ins, evi, vv;
    logic [ROW_W-1:0] vr;
    logic [4:0]       occ;
    proteas_bank_tracker #(.P_NUM(PNUM[g])) trk (
      .clk(clk), .rst_n(rst_n), .seed_load(1'b0), .seed(32'h0),
      .act_valid(act_valid), .act_row(act_row),
      .sampled(smp[g]), .bypassed(byp), .hit(hit), .inserted(ins), .evicted(evi),
      .mitig_req(m_req[g]), .mitig_valid(m_valid[g]), .mitig_row(m_row[g]),
      .busy(busy[g]), .vref_valid(vv), .vref_row(vr), .occupancy(occ));
  end

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (120_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int  disturb [NK][MAXROW];
  bit  seen [MAXROW];
  int  worst [NK];
  longint n_act, n_smp [NK];

  function automatic bit any_busy();
    for (int i = 0; i < NK; i++) if (busy[i]) return 1'b1;
    return 1'b0;
  endfunction

  // Run one pattern: j targets hammered X times, then k decoys.
  task automatic run_pattern(input int j, input int x, input int k, input bit aligned,
                             input int base);
    int mx [NK];
    int since [NK];
    int pos, total;
    bit any;
    int seq [$];
    for (int rep = 0; rep < x; rep++)
      for (int t = 0; t < j; t++) seq.push_back(base + 4 * t);
    for (int d = 0; d < k; d++) seq.push_back(base + 50000 + 4 * d);
    foreach (seq[q]) begin
      seen[seq[q]] = 1'b0;
      for (int i = 0; i < NK; i++) disturb[i][seq[q]] = 0;
    end
    for (int i = 0; i < NK; i++) begin mx[i] = 0; since[i] = 0; end
    pos = 0;
    total = WINDOW_TREFI * ACTS_TREFI;
    rst_n = 1'b0;
    @(posedge clk); #1 rst_n = 1'b1;
    for (int a = 0; a < total; a++) begin
      int r;
      if (aligned && (a % ACTS_TREFI == 0)) pos = 0;
      r = seq[pos];
      pos = (pos + 1) % seq.size();
      // Wait while any tracker refreshes victims.
      while (any_busy()) begin
        act_valid = 1'b0;
        for (int i = 0; i < NK; i++) m_req[i] = 1'b0;
        @(posedge clk); #1;
      end
      act_valid = 1'b1; act_row = ROW_W'(r);
      for (int i = 0; i < NK; i++) m_req[i] = 1'b0;
      #1;
      n_act++;
      for (int i = 0; i < NK; i++) if (smp[i]) n_smp[i]++;
      @(posedge clk); #1;
      seen[r] = 1'b1;
      any = 1'b0;
      for (int i = 0; i < NK; i++) begin
        disturb[i][r]++;
        if (r < base + 50000 && disturb[i][r] > mx[i]) mx[i] = disturb[i][r];
        since[i]++;
        if (since[i] == PERIOD[i]) any = 1'b1;
      end
      // Mitigation opportunities: one per 165/k ACTs for each tracker.
      if (any) begin
        act_valid = 1'b0;
        for (int i = 0; i < NK; i++) m_req[i] = (since[i] == PERIOD[i]);
        #1;
        for (int i = 0; i < NK; i++)
          if (m_valid[i]) begin
            check(int'(m_row[i]) < MAXROW && seen[int'(m_row[i])],
                  $sformatf("k%0d mitigated an activated row", K[i]));
            disturb[i][int'(m_row[i])] = 0;
          end
        @(posedge clk); #1;
        for (int i = 0; i < NK; i++) begin
          m_req[i] = 1'b0;
          if (since[i] == PERIOD[i]) since[i] = 0;
        end
      end
    end
    act_valid = 1'b0;
    $display("pattern j=%0d X=%0d k=%0d %s: max disturbance k1=%0d k2=%0d k4=%0d k8=%0d",
             j, x, k, aligned ? "aligned" : "unaligned", mx[0], mx[1], mx[2], mx[3]);
    for (int i = 0; i < NK; i++) begin
      if (mx[i] > worst[i]) worst[i] = mx[i];
      check(mx[i] < BOUND[i], $sformatf("k%0d max disturbance below %0d", K[i], BOUND[i]));
    end
  endtask

  initial begin
    int js [10] = '{2, 4, 8, 16, 20, 32, 40, 80, 120, 140};
    int xs [4]  = '{2, 3, 4, 5};
    int ks [6]  = '{5, 10, 20, 32, 40, 80};
    rst_n = 1'b0; act_valid = 1'b0; act_row = '0;
    n_act = 0;
    for (int i = 0; i < NK; i++) begin m_req[i] = 1'b0; worst[i] = 0; n_smp[i] = 0; end
    repeat (2) @(posedge clk);
    #1;
    foreach (js[i]) begin
      run_pattern(js[i], 1, 0, 1'b0, 1000);
      run_pattern(js[i], 1, 0, 1'b1, 1000);
    end
    foreach (js[a]) foreach (xs[b]) foreach (ks[c]) begin
      run_pattern(js[a], xs[b], ks[c], 1'b0, 2000);
      run_pattern(js[a], xs[b], ks[c], 1'b1, 2000);
    end
    for (int i = 0; i < NK; i++) begin
      real rate, want;
      rate = real'(n_smp[i]) / real'(n_act);
      want = real'(PNUM[i]) / 65536.0;
      $display("k%0d: p=%0d/65536, sampled fraction %f, worst max disturbance %0d",
               K[i], PNUM[i], rate, worst[i]);
      check(rate > 0.95 * want && rate < 1.05 * want,
            $sformatf("k%0d sampled fraction near p", K[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
