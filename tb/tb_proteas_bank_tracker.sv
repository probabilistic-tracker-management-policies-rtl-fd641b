// tb_proteas_bank_tracker: self-checking test of one bank's PROTEAS tracker.
//
// A hammering-like ACT stream (a few hot rows mixed with many decoy rows) and
// periodic mitigation requests drive the bank. An independent model - two
// xorshift32 generators, the request-stream sampler, the tracker table with
// random replacement and MFU mitigation, and the victim-refresh order -
// predicts, every cycle, the sampled/bypassed/hit/inserted/evicted flags,
// the mitigated row, occupancy, and each victim refresh. The test runs with
// p = 5 % (P_NUM = 3277) so that all cases appear often.
module tb_proteas_bank_tracker;
  localparam int ROW_W = 17;
  localparam int PNUM  = 3277;

  logic             clk = 1'b0;
  logic             rst_n;
  logic             seed_load;
  logic [31:0]      seed;
  logic             act_valid;
  logic [ROW_W-1:0] act_row;
  logic             sampled, bypassed, hit, inserted, evicted;
  logic             mitig_req, mitig_valid, busy, vref_valid;
  logic [ROW_W-1:0] mitig_row, vref_row;
  logic [4:0]       occupancy;
  int checks = 0;
  int failures = 0;

  proteas_bank_tracker #(.P_NUM(PNUM)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [31:0] xs(input logic [31:0] x);
    logic [31:0] t;
    t = x;
    t = t ^ {t[18:0], 13'b0};
    t = t ^ {17'b0, t[31:17]};
    t = t ^ {t[26:0], 5'b0};
    return t;
  endfunction

  // Model state
  logic [31:0] s_rng, r_rng;
  bit  valid[16];
  int  row[16];
  int  cnt[16];
  int  vq[$];     // expected victim-refresh slots (-1 = skipped slot)

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_s, n_b, n_h, n_i, n_e, n_m, n_v, n_empty, since;
    rst_n = 1'b0; seed_load = 1'b0; seed = '0; act_valid = 1'b0; act_row = '0; mitig_req = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    seed_load = 1'b1; seed = 32'hC0FF_EE11;
    @(posedge clk); #1 seed_load = 1'b0;
    s_rng = 32'hC0FF_EE11;
    r_rng = 32'hC0FF_EE11 ^ 32'h9E37_79B9;
    for (int i = 0; i < 16; i++) begin valid[i] = 0; row[i] = 0; cnt[i] = 0; end
    n_s = 0; n_b = 0; n_h = 0; n_i = 0; n_e = 0; n_m = 0; n_v = 0; n_empty = 0; since = 0;

    for (int cyc = 0; cyc < 150000; cyc++) begin
      bit do_mit, do_act, e_s, e_h, e_i, e_e, e_m;
      int hit_i, free_i, mfu_i, occ, r, e_mrow, vict;
      // Stimulus: mitigate about once per 165 ACT slots, never while busy.
      do_mit = !busy && (since >= 165);
      do_act = !busy && !do_mit && ($urandom_range(0, 7) != 0);
      mitig_req = do_mit;
      act_valid = do_act;
      if ($urandom_range(0, 2) == 0) r = 1000 + $urandom_range(0, 3);   // hot rows
      else r = $urandom_range(0, 4) == 0 ? $urandom_range(0, (1 << ROW_W) - 1)
                                        : 2000 + $urandom_range(0, 60);  // decoys
      if (cyc % 5000 < 30) r = $urandom_range(0, 2);                    // bank edge
      act_row = ROW_W'(r);
      #1;
      // ---- model ----
      hit_i = -1; free_i = -1; mfu_i = -1; occ = 0;
      for (int k = 0; k < 16; k++) begin
        if (valid[k]) begin
          occ++;
          if (row[k] == r) hit_i = k;
          if (mfu_i < 0 || cnt[k] > cnt[mfu_i]) mfu_i = k;
        end else if (free_i < 0) free_i = k;
      end
      e_s = do_act && (s_rng[15:0] < 16'(PNUM));
      e_h = e_s && hit_i >= 0;
      e_i = e_s && hit_i < 0;
      e_e = e_i && free_i < 0;
      e_m = do_mit && mfu_i >= 0;
      check(occupancy == 5'(occ), "occupancy");
      check(sampled == e_s && bypassed == (do_act && !e_s), "sampling decision");
      check(hit == e_h && inserted == e_i && evicted == e_e, "hit/insert/evict");
      check(mitig_valid == e_m, "mitigation valid");
      if (e_m) check(int'(mitig_row) == row[mfu_i], "MFU row");
      // Victim refresh stream
      if (vq.size() > 0) begin
        int v;
        v = vq.pop_front();
        check(busy, "busy during victim refresh");
        check(vref_valid == (v >= 0), "victim valid");
        if (v >= 0) check(int'(vref_row) == v, "victim row");
        if (vref_valid) n_v++;
      end else begin
        check(!busy && !vref_valid, "idle");
      end
      // Update model
      if (do_act) s_rng = xs(s_rng);
      if (e_h) begin if (cnt[hit_i] < (1 << 21) - 1) cnt[hit_i]++; end
      if (e_i) begin
        if (free_i >= 0) vict = free_i;
        else begin vict = int'(r_rng % 16); r_rng = xs(r_rng); end
        valid[vict] = 1; row[vict] = r; cnt[vict] = 0;
      end
      if (e_m) begin
        e_mrow = row[mfu_i];
        valid[mfu_i] = 0;
        for (int d = -2; d <= 2; d++) begin
          if (d != 0) vq.push_back((e_mrow + d >= 0 && e_mrow + d < (1 << ROW_W)) ? e_mrow + d : -1);
        end
      end
      if (do_mit && !e_m) n_empty++;
      if (do_mit) since = 0; else since++;
      if (e_s) n_s++;
      if (do_act && !e_s) n_b++;
      if (e_h) n_h++;
      if (e_i) n_i++;
      if (e_e) n_e++;
      if (e_m) n_m++;
      @(posedge clk); #1;
    end
    mitig_req = 1'b0; act_valid = 1'b0;
    $display("sampled=%0d bypassed=%0d hits=%0d inserts=%0d evictions=%0d mitigations=%0d empty=%0d victim_refreshes=%0d",
             n_s, n_b, n_h, n_i, n_e, n_m, n_empty, n_v);
    check(n_h > 0 && n_i > 0 && n_e > 0 && n_m > 0 && n_v > 0, "every case exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
