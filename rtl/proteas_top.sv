// proteas_top: PROTEAS Rowhammer mitigation for one DRAM rank - the
// memory-controller RFM logic plus one probabilistic tracker per bank.
//
// Memory-controller side: one RAA (rolling accumulation of ACTs) counter per
// bank counts the ACTs sent to that bank; when it reaches RFM_TH it is
// cleared and an RFM is queued for the bank. DRAM side: every bank has a
// proteas_bank_tracker (request-stream sampler, 16-entry tracker with random
// eviction and MFU mitigation, victim-refresh sequencer). An all-bank REF
// asks every bank's tracker for one mitigation; an RFM asks one bank.
//
// Command bus (this design's own arbitration, one command per cycle):
//   1. a queued RFM to a bank that is not busy refreshing victims (lowest
//      bank first);
//   2. otherwise a REF, if ref_valid and no bank is busy (ref_ready);
//   3. otherwise the ACT, if act_valid and its bank has no queued RFM and is
//      not busy (act_ready). An ACT held back this way is a stall.
// The scheduler that creates ACT and REF and the DRAM arrays that perform the
// victim refreshes are outside this block; vref_valid/vref_row per bank are
// the refresh requests for the arrays.
//
// Timing: act/ref handshakes are valid/ready, both sampled at the clock edge.
// An ACT that makes RAA reach RFM_TH is followed, at the earliest, by the
// bank's RFM two cycles later; in between, further ACTs to that bank stall.
// Victim refreshes follow a mitigation by one cycle and last 2*BLAST_RADIUS
// cycles per bank, during which that bank accepts no ACT, RFM or REF.
module proteas_top
  import proteas_pkg::*;
#(
  parameter int unsigned NUM_BANKS     = 16,
  parameter int unsigned NUM_ENTRIES_P = NUM_ENTRIES,
  parameter int unsigned ROW_W_P       = ROW_W,
  parameter int unsigned CNT_W_P       = CNT_W,
  parameter int unsigned P_FRAC_W      = 16,
  parameter int unsigned P_NUM         = 655,
  parameter int unsigned BLAST_RADIUS  = 2,
  parameter int unsigned RAA_W         = 8,
  parameter int unsigned RFM_TH        = ACTS_PER_TREFI,
  localparam int unsigned BANK_W       = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1,
  localparam int unsigned OCC_W        = $clog2(NUM_ENTRIES_P + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // Secret seeds, one per bank
  input  logic                 seed_load,
  input  logic [RND_W-1:0]     seed      [NUM_BANKS],
  // ACT commands from the scheduler
  input  logic                 act_valid,
  output logic                 act_ready,
  input  logic [BANK_W-1:0]    act_bank,
  input  logic [ROW_W_P-1:0]   act_row,
  // All-bank REF, once per tREFI
  input  logic                 ref_valid,
  output logic                 ref_ready,
  // RFM issued on the command bus this cycle
  output logic                 rfm_fire,
  output logic [BANK_W-1:0]    rfm_bank,
  // Per-bank mitigations and victim refreshes
  output logic [NUM_BANKS-1:0] mitig_valid,
  output logic [ROW_W_P-1:0]   mitig_row  [NUM_BANKS],
  output logic [NUM_BANKS-1:0] vref_valid,
  output logic [ROW_W_P-1:0]   vref_row   [NUM_BANKS],
  // Per-bank tracker events (for monitoring)
  output logic [NUM_BANKS-1:0] ev_sampled,
  output logic [NUM_BANKS-1:0] ev_bypassed,
  output logic [NUM_BANKS-1:0] ev_hit,
  output logic [NUM_BANKS-1:0] ev_inserted,
  output logic [NUM_BANKS-1:0] ev_evicted,
  output logic [OCC_W-1:0]     occupancy  [NUM_BANKS]
);

  logic [NUM_BANKS-1:0] bank_busy;
  logic [NUM_BANKS-1:0] rfm_req;
  logic [NUM_BANKS-1:0] rfm_pend_q;
  logic [NUM_BANKS-1:0] rfm_pend;
  logic [NUM_BANKS-1:0] bank_act;
  logic [NUM_BANKS-1:0] bank_mitig_req;
  logic                 ref_fire;
  logic                 act_fire;

  // RFM queued: either already pending or just requested by its RAA counter.
  assign rfm_pend = rfm_pend_q | rfm_req;

  // Arbitration: RFM > REF > ACT.
  always_comb begin
    rfm_fire = 1'b0;
    rfm_bank = '0;
    for (int b = NUM_BANKS - 1; b >= 0; b--) begin
      if (rfm_pend[b] && !bank_busy[b]) begin
        rfm_fire = 1'b1;
        rfm_bank = BANK_W'(b);
      end
    end
  end

  assign ref_ready = !rfm_fire && (bank_busy == '0);
  assign ref_fire  = ref_valid && ref_ready;
  assign act_ready = !rfm_fire && !ref_fire
                     && !bank_busy[act_bank] && !rfm_pend[act_bank];
  assign act_fire  = act_valid && act_ready;

  always_comb begin
    for (int b = 0; b < NUM_BANKS; b++) begin
      bank_act[b]       = act_fire && (act_bank == BANK_W'(b));
      bank_mitig_req[b] = ref_fire || (rfm_fire && (rfm_bank == BANK_W'(b)));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rfm_pend_q <= '0;
    end else begin
      for (int b = 0; b < NUM_BANKS; b++) begin
        if (rfm_fire && (rfm_bank == BANK_W'(b))) rfm_pend_q[b] <= 1'b0;
        else if (rfm_req[b])                      rfm_pend_q[b] <= 1'b1;
      end
    end
  end

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    logic [RAA_W-1:0] raa_unused;

    // Memory-controller side
    proteas_raa_counter #(
      .RAA_W  (RAA_W),
      .RFM_TH (RFM_TH)
    ) u_raa (
      .clk     (clk),
      .rst_n   (rst_n),
      .act     (bank_act[b]),
      .rfm_req (rfm_req[b]),
      .raa     (raa_unused)
    );

    // DRAM side
    proteas_bank_tracker #(
      .NUM_ENTRIES_P (NUM_ENTRIES_P),
      .ROW_W_P       (ROW_W_P),
      .CNT_W_P       (CNT_W_P),
      .P_FRAC_W      (P_FRAC_W),
      .P_NUM         (P_NUM),
      .BLAST_RADIUS  (BLAST_RADIUS)
    ) u_bank (
      .clk         (clk),
      .rst_n       (rst_n),
      .seed_load   (seed_load),
      .seed        (seed[b]),
      .act_valid   (bank_act[b]),
      .act_row     (act_row),
      .sampled     (ev_sampled[b]),
      .bypassed    (ev_bypassed[b]),
      .hit         (ev_hit[b]),
      .inserted    (ev_inserted[b]),
      .evicted     (ev_evicted[b]),
      .mitig_req   (bank_mitig_req[b]),
      .mitig_valid (mitig_valid[b]),
      .mitig_row   (mitig_row[b]),
      .busy        (bank_busy[b]),
      .vref_valid  (vref_valid[b]),
      .vref_row    (vref_row[b]),
      .occupancy   (occupancy[b])
    );
  end

  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({rfm_fire, ref_fire, act_fire}));

endmodule
