// tb_proteas_tracker_sizes: sensitivity of the bank tracker to its size.
//
// Six bank trackers with 2, 4, 16, 32, 64 and 128 entries, all at the
// default operating point (p = 655/65536, about 1 %, one mitigation request
// per 165 ACTs, i.e. one per tREFI), see the same activation stream. The
// stream is a subset of the attack patterns used for the full attack test:
//   uniform      (r1..rj)^N for j = 2,4,8,16,20,32,40,80,120,140;
//   non-uniform  [(r1..rj)^X, (d1..dk)]^N for the same ten j, X = 2 and 5,
//                k = 10 and 80;
// each both continuous and restarted at every tREFI (aligned): 100 patterns,
// WINDOW_TREFI refresh intervals each.
// For each size the test reports the worst maximum disturbance (ACTs a
// target row receives between two mitigations of it). It checks that every
// mitigated row was activated, that no size reaches 4800 ACTs, and that the
// expected trend holds at its ends: the 2-entry tracker does worse than the
// 16-entry one, which does no better than the 128-entry one.
// The trackers differ only in their size parameter, so they share their
// seeds and sampling decisions; the difference comes from capacity and
// eviction alone.
module tb_proteas_tracker_sizes;
  import proteas_pkg::*;

  localparam int WINDOW_TREFI = 1024;
  localparam int ACTS_TREFI   = ACTS_PER_TREFI;
  localparam int NK           = 6;
  localparam int K      [NK] = '{2, 4, 16, 32, 64, 128};
  localparam int PNUM   [NK] = '{655, 655, 655, 655, 655, 655};
  localparam int PERIOD [NK] = '{165, 165, 165, 165, 165, 165};
  localparam int BOUND  [NK] = '{4800, 4800, 4800, 4800, 4800, 4800};
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
    logic [$clog2(K[g]+1)-1:0] occ;
    proteas_bank_tracker #(.NUM_ENTRIES_P(K[g]), .P_NUM(PNUM[g])) trk (
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
      @(posedge clk); #1;
      seen[r] = 1'b1;
      any = 1'b0;
      for (int i = 0; i < NK; i++) begin
        disturb[i][r]++;
        if (r < base + 50000 && disturb[i][r] > mx[i]) mx[i] = disturb[i][r];
        since[i]++;
        if (since[i] == PERIOD[i]) any = 1'b1;
      end
      // Mitigation opportunities: one per tREFI (165 ACTs) for each tracker.
      if (any) begin
        act_valid = 1'b0;
        for (int i = 0; i < NK; i++) m_req[i] = (since[i] == PERIOD[i]);
        #1;
        for (int i = 0; i < NK; i++)
          if (m_valid[i]) begin
            check(int'(m_row[i]) < MAXROW && seen[int'(m_row[i])],
                  $sformatf("N%0d mitigated an activated row", K[i]));
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
    $display("pattern j=%0d X=%0d k=%0d %s: max disturbance N2=%0d N4=%0d N16=%0d N32=%0d N64=%0d N128=%0d",
             j, x, k, aligned ? "aligned" : "unaligned", mx[0], mx[1], mx[2], mx[3], mx[4], mx[5]);
    for (int i = 0; i < NK; i++) begin
      if (mx[i] > worst[i]) worst[i] = mx[i];
      check(mx[i] < BOUND[i], $sformatf("N%0d max disturbance below %0d", K[i], BOUND[i]));
    end
  endtask

  initial begin
    int js [10] = '{2, 4, 8, 16, 20, 32, 40, 80, 120, 140};
    int xs [2]  = '{2, 5};
    int ks [2]  = '{10, 80};
    rst_n = 1'b0; act_valid = 1'b0; act_row = '0;
    for (int i = 0; i < NK; i++) begin m_req[i] = 1'b0; worst[i] = 0; end
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
    for (int i = 0; i < NK; i++)
      $display("N=%0d entries: worst max disturbance %0d", K[i], worst[i]);
    check(worst[0] > worst[2], "2 entries do worse than 16");
    check(worst[2] >= worst[5], "16 entries do no better than 128");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
