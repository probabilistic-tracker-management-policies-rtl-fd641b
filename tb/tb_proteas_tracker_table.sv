// tb_proteas_tracker_table: self-checking test of the PROTEAS tracker table.
//
// Two tables see the same random stream of sampled lookups (rows from a small
// pool, so hits, inserts and evictions all occur) and mitigation requests:
// the default 16-entry table with 21-bit counters, and a 5-entry table with
// 3-bit counters (non-power-of-two random victim, saturating counters). Each
// is compared, every cycle, with a behavioural model of the five policies:
// hit -> counter+1 (saturating), miss -> insert counter 0 into the lowest
// invalid entry or else entry victim_rnd mod N, mitigation -> highest counter
// (lowest index on ties) reported and invalidated.
module tb_proteas_tracker_table;
  localparam int ROW_W = 17;

  logic             clk = 1'b0;
  logic             rst_n;
  logic             lookup_valid;
  logic [ROW_W-1:0] lookup_row;
  logic [31:0]      victim_rnd;
  logic             mitig_req;
  int checks = 0;
  int failures = 0;

  // Outputs of both DUTs
  logic             a_hit, a_ins, a_ev, a_vu, a_drop, a_mv;
  logic [ROW_W-1:0] a_evrow, a_mrow;
  logic [20:0]      a_mcnt;
  logic [4:0]       a_occ;
  logic             b_hit, b_ins, b_ev, b_vu, b_drop, b_mv;
  logic [ROW_W-1:0] b_evrow, b_mrow;
  logic [2:0]       b_mcnt;
  logic [2:0]       b_occ;

  proteas_tracker_table dut_a (
    .clk(clk), .rst_n(rst_n), .lookup_valid(lookup_valid), .lookup_row(lookup_row),
    .victim_rnd(victim_rnd), .hit(a_hit), .inserted(a_ins), .evicted(a_ev),
    .evict_row(a_evrow), .victim_used(a_vu), .lookup_dropped(a_drop),
    .mitig_req(mitig_req), .mitig_valid(a_mv), .mitig_row(a_mrow), .mitig_cnt(a_mcnt),
    .occupancy(a_occ));

  proteas_tracker_table #(.NUM_ENTRIES_P(5), .CNT_W_P(3)) dut_b (
    .clk(clk), .rst_n(rst_n), .lookup_valid(lookup_valid), .lookup_row(lookup_row),
    .victim_rnd(victim_rnd), .hit(b_hit), .inserted(b_ins), .evicted(b_ev),
    .evict_row(b_evrow), .victim_used(b_vu), .lookup_dropped(b_drop),
    .mitig_req(mitig_req), .mitig_valid(b_mv), .mitig_row(b_mrow), .mitig_cnt(b_mcnt),
    .occupancy(b_occ));

  always #5 clk = ~clk;

  // Behavioural model of one table.
  class table_model;
    int n;
    int cmax;
    bit valid[16];
    int row[16];
    int cnt[16];
    // Results of the current cycle
    bit hit, ins, ev, mv;
    int ev_row, m_row, m_cnt, occ;

    function new(int entries, int cnt_bits);
      n = entries;
      cmax = (1 << cnt_bits) - 1;
      for (int i = 0; i < 16; i++) begin valid[i] = 0; row[i] = 0; cnt[i] = 0; end
    endfunction

    // Compute outputs and apply the update.
    function void step(bit lv, int lr, int rnd_low, bit mreq);
      int hit_i, free_i, mfu_i, vict;
      hit_i = -1; free_i = -1; mfu_i = -1; occ = 0;
      for (int i = 0; i < n; i++) begin
        if (valid[i]) begin
          occ++;
          if (row[i] == lr) hit_i = i;
          if (mfu_i < 0 || cnt[i] > cnt[mfu_i]) mfu_i = i;
        end else if (free_i < 0) free_i = i;
      end
      hit = 0; ins = 0; ev = 0; mv = 0;
      if (mreq) begin
        if (mfu_i >= 0) begin
          mv = 1; m_row = row[mfu_i]; m_cnt = cnt[mfu_i];
          valid[mfu_i] = 0;
        end
      end else if (lv) begin
        if (hit_i >= 0) begin
          hit = 1;
          if (cnt[hit_i] < cmax) cnt[hit_i]++;
        end else begin
          ins = 1;
          if (free_i >= 0) vict = free_i;
          else begin
            ev = 1;
            vict = rnd_low % n;
            ev_row = row[vict];
          end
          valid[vict] = 1; row[vict] = lr; cnt[vict] = 0;
        end
      end
    endfunction
  endclass

  table_model ma, mb;

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
    int n_hit, n_ins, n_ev, n_mit, n_sat, n_drop, n_empty;
    ma = new(16, 21);
    mb = new(5, 3);
    n_hit = 0; n_ins = 0; n_ev = 0; n_mit = 0; n_sat = 0; n_drop = 0; n_empty = 0;
    rst_n = 1'b0; lookup_valid = 1'b0; lookup_row = '0; victim_rnd = '0; mitig_req = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    // Mitigation on an empty table reports nothing.
    mitig_req = 1'b1;
    #1 check(!a_mv && !b_mv && a_occ == 0, "empty mitigation");
    ma.step(0, 0, 0, 1); mb.step(0, 0, 0, 1);
    n_empty++;
    @(posedge clk); #1;

    for (int i = 0; i < 40000; i++) begin
      int pool;
      // Phases: small pools for hits and saturation, large pools for thrashing.
      pool = ((i / 2000) % 3 == 0) ? 4 : (((i / 2000) % 3 == 1) ? 12 : 40);
      lookup_valid = ($urandom_range(0, 4) != 0);
      lookup_row   = ROW_W'($urandom_range(0, pool - 1) * 7 + 3);
      victim_rnd   = $urandom;
      mitig_req    = ($urandom_range(0, 29) == 0);
      #1;
      ma.step(lookup_valid, int'(lookup_row), int'(victim_rnd % 16), mitig_req);
      mb.step(lookup_valid, int'(lookup_row), int'(victim_rnd % 5), mitig_req);
      check(a_hit == ma.hit && a_ins == ma.ins && a_ev == ma.ev && a_vu == ma.ev,
            "A events");
      check(a_occ == 5'(ma.occ), "A occupancy");
      check(a_mv == ma.mv, "A mitig_valid");
      if (ma.mv) check(a_mrow == ROW_W'(ma.m_row) && a_mcnt == 21'(ma.m_cnt), "A MFU row/count");
      if (ma.ev) check(a_evrow == ROW_W'(ma.ev_row), "A evicted row");
      check(a_drop == (lookup_valid && mitig_req), "A dropped lookup");
      check(b_hit == mb.hit && b_ins == mb.ins && b_ev == mb.ev, "B events");
      check(b_occ == 3'(mb.occ), "B occupancy");
      check(b_mv == mb.mv, "B mitig_valid");
      if (mb.mv) check(b_mrow == ROW_W'(mb.m_row) && b_mcnt == 3'(mb.m_cnt), "B MFU row/count");
      if (mb.ev) check(b_evrow == ROW_W'(mb.ev_row), "B evicted row");
      if (ma.hit) n_hit++;
      if (ma.ins) n_ins++;
      if (ma.ev) n_ev++;
      if (ma.mv) n_mit++;
      if (mb.mv && mb.m_cnt == 7) n_sat++;
      if (lookup_valid && mitig_req) n_drop++;
      @(posedge clk); #1;
    end
    lookup_valid = 1'b0; mitig_req = 1'b0;
    $display("hits=%0d inserts=%0d evictions=%0d mitigations=%0d saturated=%0d dropped=%0d",
             n_hit, n_ins, n_ev, n_mit, n_sat, n_drop);
    check(n_hit > 0 && n_ins > 0 && n_ev > 0 && n_mit > 0 && n_sat > 0 && n_drop > 0,
          "every case exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
