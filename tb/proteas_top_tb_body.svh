// proteas_top_tb_body.svh: shared body of the two end-to-end testbenches of
// proteas_top. The including module declares TB_RFM_TH (the RFM threshold of
// the instance), N_REFS (test length in tREFI), TB_BANK0_PCT (share of ACTs
// sent to the attacked bank 0), TB_ACT_PCT (ACT slot occupancy) and
// TB_MAXD_BOUND (largest maximum disturbance accepted) and TB_NEED_EVICT
// (whether a random eviction must occur), then instantiates
// proteas_top as dut with the port names used here.
//
// A scheduler model issues ACTs (honouring act_ready) and one all-bank REF
// every REF_PERIOD cycles. Bank 0 is attacked with a Blacksmith-like
// non-uniform pattern: ATTACK_J target rows hammered twice, then 8 decoy
// rows, repeated. The other banks see random traffic, some at the bank
// edges. Checked every cycle: at most one of RFM/REF/ACT; the ready rules;
// REF asks every bank and RFM one bank for a mitigation; each mitigation is
// followed by refreshes of row-2, row-1, row+1, row+2 (edge rows skipped);
// one RFM per RFM_TH ACTs per bank. At the end: maximum disturbance of the
// attacked rows below the bound, and every mechanism seen at least once.
  localparam int NB         = 16;
  localparam int REF_PERIOD = 174;      // tREFI / tRC, about 7800 ns / 45 ns
  localparam int ATTACK_J   = 24;
  localparam int MAXROW     = (1 << ROW_W) - 1;

  logic              clk = 1'b0;
  logic              rst_n;
  logic              seed_load;
  logic [RND_W-1:0]  seed [NB];
  logic              act_valid, act_ready;
  logic [3:0]        act_bank;
  logic [ROW_W-1:0]  act_row;
  logic              ref_valid, ref_ready;
  logic              rfm_fire;
  logic [3:0]        rfm_bank;
  logic [NB-1:0]     mitig_valid, vref_valid;
  logic [ROW_W-1:0]  mitig_row [NB];
  logic [ROW_W-1:0]  vref_row [NB];
  logic [NB-1:0]     ev_sampled, ev_bypassed, ev_hit, ev_inserted, ev_evicted;
  logic [4:0]        occupancy [NB];

  int checks = 0;
  int failures = 0;


  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (N_REFS * REF_PERIOD * 2 + 10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Scoreboard state
  int vq [NB][$];
  int acts_bank [NB];
  int rfms_bank [NB];
  int disturb [int];       // bank-0 ACTs per row since its last mitigation
  int max_dist;
  bit busy_m [NB];         // model of "bank busy"
  int busy_cnt [NB];
  bit pend_m [NB];         // model of "RFM queued"
  int raa_m [NB];
  // Mechanism counters
  int n_samp, n_byp, n_hit, n_ins, n_evict, n_ref_mit, n_rfm_mit, n_ref_empty;
  int n_act_stall, n_ref_stall, n_edge_skip, n_seed, n_acts;

  initial begin
    int pos, rep;
    bit in_decoy;
    rst_n = 1'b0; seed_load = 1'b0; act_valid = 1'b0; act_bank = '0; act_row = '0;
    ref_valid = 1'b0;
    for (int b = 0; b < NB; b++) begin
      seed[b] = 32'h1000_0000 + b * 32'h0101_0101;
      acts_bank[b] = 0; rfms_bank[b] = 0; busy_m[b] = 0; busy_cnt[b] = 0;
      pend_m[b] = 0; raa_m[b] = 0;
    end
    max_dist = 0;
    n_samp = 0; n_byp = 0; n_hit = 0; n_ins = 0; n_evict = 0; n_ref_mit = 0;
    n_rfm_mit = 0; n_ref_empty = 0; n_act_stall = 0; n_ref_stall = 0;
    n_edge_skip = 0; n_seed = 0; n_acts = 0;
    pos = 0; rep = 0; in_decoy = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    seed_load = 1'b1;
    @(posedge clk); #1 seed_load = 1'b0;
    n_seed++;

    for (int cyc = 0; cyc < N_REFS * REF_PERIOD; cyc++) begin
      int b, r;
      bit exp_act_ready, exp_rfm;
      // ---- stimulus ----
      ref_valid = (cyc % REF_PERIOD == 0) || (ref_valid && !ref_ready);
      if (cyc == N_REFS * REF_PERIOD / 2) begin
        for (int k = 0; k < NB; k++) seed[k] = $urandom;
        seed_load = 1'b1;
        n_seed++;
      end else begin
        seed_load = 1'b0;
      end
      if (!act_valid || act_ready) begin
        // choose a new ACT
        if ($urandom_range(0, 99) < TB_BANK0_PCT) begin
          b = 0;
          // Non-uniform pattern: (r1..rj)^2 then 8 decoys, repeated.
          if (!in_decoy) begin
            r = 5000 + 4 * pos;
            pos++;
            if (pos == ATTACK_J) begin pos = 0; rep++; if (rep == 2) begin rep = 0; in_decoy = 1; end end
          end else begin
            r = 60000 + $urandom_range(0, 200);
            pos++;
            if (pos == 8) begin pos = 0; in_decoy = 0; end
          end
        end else begin
          b = $urandom_range(1, NB - 1);
          r = ($urandom_range(0, 9) == 0) ? (($urandom_range(0, 1) == 0) ? $urandom_range(0, 1)
                                                                       : MAXROW - $urandom_range(0, 1))
                                          : 100 * b + $urandom_range(0, 40);
        end
        act_valid = ($urandom_range(0, 99) < TB_ACT_PCT);
        act_bank  = 4'(b);
        act_row   = ROW_W'(r);
      end
      #1;
      // ---- checks on this cycle ----
      exp_rfm = 0;
      for (int k = 0; k < NB; k++) if (pend_m[k] && !busy_m[k]) exp_rfm = 1;
      check(rfm_fire == exp_rfm, "RFM issued when queued and bank idle");
      check(ref_ready == (!exp_rfm && busy_m.sum() with (int'(item)) == 0), "ref_ready rule");
      exp_act_ready = !exp_rfm && !(ref_valid && ref_ready) && !busy_m[act_bank] && !pend_m[act_bank];
      check(act_ready == exp_act_ready, "act_ready rule");
      if (act_valid && !act_ready) n_act_stall++;
      if (ref_valid && !ref_ready) n_ref_stall++;
      for (int k = 0; k < NB; k++) begin
        bit req;
        req = (ref_valid && ref_ready) || (rfm_fire && rfm_bank == 4'(k));
        if (!req) check(!mitig_valid[k], "mitigation only on REF/RFM");
        if (req && ref_valid && ref_ready && !mitig_valid[k]) begin
          check(occupancy[k] == 0, "empty tracker on unanswered REF");
          n_ref_empty++;
        end
        if (mitig_valid[k]) begin
          if (rfm_fire && rfm_bank == 4'(k)) n_rfm_mit++; else n_ref_mit++;
          for (int d = -2; d <= 2; d++)
            if (d != 0) vq[k].push_back((int'(mitig_row[k]) + d >= 0 && int'(mitig_row[k]) + d <= MAXROW)
                                        ? int'(mitig_row[k]) + d : -1);
          if (k == 0 && disturb.exists(int'(mitig_row[k]))) disturb[int'(mitig_row[k])] = 0;
        end
        // victim refresh stream (starts the cycle after the mitigation)
        if (busy_m[k]) begin
          int v;
          v = vq[k].pop_front();
          check(vref_valid[k] == (v >= 0), "victim slot valid");
          if (v >= 0) check(int'(vref_row[k]) == v, "victim row");
          else n_edge_skip++;
        end else begin
          check(!vref_valid[k], "no victim refresh while idle");
        end
        check(!(ev_sampled[k] && ev_bypassed[k]), "sampled xor bypassed");
        if (ev_sampled[k]) n_samp++;
        if (ev_bypassed[k]) n_byp++;
        if (ev_hit[k]) n_hit++;
        if (ev_inserted[k]) n_ins++;
        if (ev_evicted[k]) n_evict++;
      end
      check($onehot0({rfm_fire, ref_valid && ref_ready, act_valid && act_ready}), "one command per cycle");
      if (act_valid && act_ready) begin
        n_acts++;
        acts_bank[act_bank]++;
        check(ev_sampled[act_bank] || ev_bypassed[act_bank], "ACT reaches its bank");
        if (act_bank == 0) begin
          if (!disturb.exists(int'(act_row))) disturb[int'(act_row)] = 0;
          disturb[int'(act_row)]++;
          if (disturb[int'(act_row)] > max_dist && act_row < 60000) max_dist = disturb[int'(act_row)];
        end
      end
      if (rfm_fire) rfms_bank[rfm_bank]++;
      // ---- advance the model to the next cycle ----
      for (int k = 0; k < NB; k++) begin
        if (busy_m[k]) begin
          busy_cnt[k]--;
          if (busy_cnt[k] == 0) busy_m[k] = 0;
        end
        if (mitig_valid[k]) begin busy_m[k] = 1; busy_cnt[k] = 4; end
        if (rfm_fire && rfm_bank == 4'(k)) pend_m[k] = 0;
      end
      // RAA model: rfm_req appears the cycle after the threshold ACT
      if (act_valid && act_ready) begin
        raa_m[act_bank]++;
        if (raa_m[act_bank] == TB_RFM_TH) begin raa_m[act_bank] = 0; pend_m[act_bank] = 1; end
      end
      @(posedge clk); #1;
    end
    act_valid = 1'b0; ref_valid = 1'b0;
    repeat (10) @(posedge clk);

    for (int k = 0; k < NB; k++)
      check(rfms_bank[k] == acts_bank[k] / TB_RFM_TH || rfms_bank[k] == acts_bank[k] / TB_RFM_TH - 1,
            "one RFM per RFM_TH ACTs");
    $display("ACTs=%0d sampled=%0d bypassed=%0d hits=%0d inserts=%0d evictions=%0d",
             n_acts, n_samp, n_byp, n_hit, n_ins, n_evict);
    $display("REF mitigations=%0d RFM mitigations=%0d REF on empty tracker=%0d ACT stalls=%0d REF stalls=%0d edge skips=%0d seed loads=%0d",
             n_ref_mit, n_rfm_mit, n_ref_empty, n_act_stall, n_ref_stall, n_edge_skip, n_seed);
    $display("bank 0 attack: max disturbance=%0d ACTs (bound %0d)", max_dist, TB_MAXD_BOUND);
    check(max_dist > 0 && max_dist < TB_MAXD_BOUND, "max disturbance below bound");
    check(n_samp > 0, "mechanism: sampling");
    check(n_byp > 0, "mechanism: bypass");
    check(n_hit > 0, "mechanism: hit/update");
    check(n_ins > 0, "mechanism: insertion");
    if (TB_NEED_EVICT) check(n_evict > 0, "mechanism: random eviction");
    check(n_ref_mit > 0, "mechanism: REF mitigation");
    check(n_rfm_mit > 0, "mechanism: RFM mitigation");
    check(n_ref_empty > 0, "mechanism: REF on empty tracker");
    check(n_act_stall > 0, "mechanism: ACT stall");
    check(n_ref_stall > 0, "mechanism: REF stall");
    check(n_edge_skip > 0, "mechanism: victim skipped at bank edge");
    check(n_seed > 1, "mechanism: seed reload");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
