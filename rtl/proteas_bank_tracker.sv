// proteas_bank_tracker: the complete PROTEAS tracker of one DRAM bank.
//
// An ACT to the bank first meets the request-stream sampler (PRSS): with
// probability p it looks up the tracker table, otherwise it bypasses the
// tracker. A sampled ACT that hits increments its entry's counter; one that
// misses is inserted with counter 0, into a free entry or, if the table is
// full, over a randomly chosen entry picked by a second PRNG. On a mitigation
// request (an all-bank REF or an RFM for this bank) the entry with the highest
// counter is removed and its neighbours within the blast radius are refreshed
// by the victim-refresh sequencer.
//
// The structure - one sampler PRNG, one replacement PRNG, a 16-entry table and
// MFU mitigation - is the paper's. Seeding both PRNGs from one secret seed
// (the replacement PRNG gets seed XOR SEED_SPLIT) is this design's choice.
//
// Interface and timing:
//   act_valid/act_row  ACT to this bank; sampled/bypassed/hit/inserted/evicted
//                      report, combinationally, what happened to it.
//   mitig_req          one-cycle request; mitig_valid/mitig_row report the
//                      chosen aggressor in the same cycle (mitig_valid low if
//                      the tracker is empty). Must only be raised when busy
//                      is low.
//   busy, vref_valid/vref_row
//                      victim refreshes: 2*BLAST_RADIUS cycles starting the
//                      cycle after a successful mitigation.
module proteas_bank_tracker
  import proteas_pkg::*;
#(
  parameter int unsigned NUM_ENTRIES_P = NUM_ENTRIES,
  parameter int unsigned ROW_W_P       = ROW_W,
  parameter int unsigned CNT_W_P       = CNT_W,
  parameter int unsigned P_FRAC_W      = 16,
  parameter int unsigned P_NUM         = 655,
  parameter int unsigned BLAST_RADIUS  = 2
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               seed_load,
  input  logic [RND_W-1:0]                   seed,
  // ACT stream
  input  logic                               act_valid,
  input  logic [ROW_W_P-1:0]                 act_row,
  output logic                               sampled,
  output logic                               bypassed,
  output logic                               hit,
  output logic                               inserted,
  output logic                               evicted,
  // Mitigation
  input  logic                               mitig_req,
  output logic                               mitig_valid,
  output logic [ROW_W_P-1:0]                 mitig_row,
  output logic                               busy,
  output logic                               vref_valid,
  output logic [ROW_W_P-1:0]                 vref_row,
  output logic [$clog2(NUM_ENTRIES_P+1)-1:0] occupancy
);

  logic [RND_W-1:0]   repl_rnd;
  logic               victim_used;
  logic [ROW_W_P-1:0] evict_row_unused;
  logic [CNT_W_P-1:0] mitig_cnt_unused;
  logic               lookup_dropped_unused;

  proteas_prss_sampler #(
    .P_FRAC_W (P_FRAC_W),
    .P_NUM    (P_NUM)
  ) u_sampler (
    .clk       (clk),
    .rst_n     (rst_n),
    .seed_load (seed_load),
    .seed      (seed),
    .act_valid (act_valid),
    .sampled   (sampled),
    .bypassed  (bypassed)
  );

  proteas_prng u_repl_prng (
    .clk       (clk),
    .rst_n     (rst_n),
    .seed_load (seed_load),
    .seed      (seed ^ SEED_SPLIT),
    .advance   (victim_used),
    .rnd       (repl_rnd)
  );

  proteas_tracker_table #(
    .NUM_ENTRIES_P (NUM_ENTRIES_P),
    .ROW_W_P       (ROW_W_P),
    .CNT_W_P       (CNT_W_P)
  ) u_table (
    .clk            (clk),
    .rst_n          (rst_n),
    .lookup_valid   (sampled),
    .lookup_row     (act_row),
    .victim_rnd     (repl_rnd),
    .hit            (hit),
    .inserted       (inserted),
    .evicted        (evicted),
    .evict_row      (evict_row_unused),
    .victim_used    (victim_used),
    .lookup_dropped (lookup_dropped_unused),
    .mitig_req      (mitig_req),
    .mitig_valid    (mitig_valid),
    .mitig_row      (mitig_row),
    .mitig_cnt      (mitig_cnt_unused),
    .occupancy      (occupancy)
  );

  proteas_victim_refresh #(
    .ROW_W_P      (ROW_W_P),
    .BLAST_RADIUS (BLAST_RADIUS)
  ) u_vref (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (mitig_valid),
    .aggr_row  (mitig_row),
    .busy      (busy),
    .ref_valid (vref_valid),
    .ref_row   (vref_row)
  );

  // The bank cannot be activated or asked for a mitigation while refreshing,
  // and a REF/RFM never shares a cycle with an ACT to the same bank.
  a_idle_on_mitig: assert property (@(posedge clk) disable iff (!rst_n)
    mitig_req |-> !busy);
  a_no_act_with_mitig: assert property (@(posedge clk) disable iff (!rst_n)
    !(act_valid && mitig_req));
  a_no_act_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    !(act_valid && busy));

endmodule
