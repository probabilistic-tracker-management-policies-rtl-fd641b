// proteas_tracker_table: the fully associative aggressor-row tracker of one
// DRAM bank, managed with the PROTEAS policies.
//
// Each entry holds [valid, row, counter]. The five management policies:
//   1 Lookup     - only ACTs chosen by the request-stream sampler arrive here
//                  (lookup_valid); every entry is compared in parallel.
//   2 Update     - on a hit the entry's counter is incremented (saturating).
//   4 Insertion  - on a miss the row is always inserted with counter 0, into
//                  the lowest-numbered invalid entry if there is one.
//   3 Eviction   - if the tracker is full, the victim is a random entry,
//                  victim_rnd mod NUM_ENTRIES (victim_rnd comes from the
//                  bank's replacement PRNG; victim_used tells it to advance).
//   5 Mitigation - on mitig_req (a REF or an RFM) the valid entry with the
//                  highest counter is reported on mitig_row and invalidated.
// Update, insertion and the MFU mitigation follow the paper; random
// replacement is its key change to the eviction policy.
//
// This design's own choices: counters saturate instead of wrapping; ties for
// the highest counter go to the lowest index; a lookup that arrives in the
// same cycle as a mitigation request is dropped (lookup_dropped), since a
// bank being refreshed cannot be activated; a mitigation request that finds
// the tracker empty reports nothing (mitig_valid stays low).
//
// Timing: all outputs are combinational from the inputs of the same cycle and
// the table state; the table changes at the following clock edge. One lookup
// or one mitigation per cycle.
module proteas_tracker_table
  import proteas_pkg::*;
#(
  parameter int unsigned NUM_ENTRIES_P = NUM_ENTRIES,
  parameter int unsigned ROW_W_P       = ROW_W,
  parameter int unsigned CNT_W_P       = CNT_W
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // Sampled lookup
  input  logic                             lookup_valid,
  input  logic [ROW_W_P-1:0]               lookup_row,
  input  logic [RND_W-1:0]                 victim_rnd,
  output logic                             hit,
  output logic                             inserted,
  output logic                             evicted,
  output logic [ROW_W_P-1:0]               evict_row,
  output logic                             victim_used,
  output logic                             lookup_dropped,
  // Mitigation
  input  logic                             mitig_req,
  output logic                             mitig_valid,
  output logic [ROW_W_P-1:0]               mitig_row,
  output logic [CNT_W_P-1:0]               mitig_cnt,
  // Status
  output logic [$clog2(NUM_ENTRIES_P+1)-1:0] occupancy
);

  localparam int unsigned IDX_W = (NUM_ENTRIES_P > 1) ? $clog2(NUM_ENTRIES_P) : 1;

  typedef struct packed {
    logic               valid;
    logic [ROW_W_P-1:0] row;
    logic [CNT_W_P-1:0] cnt;
  } entry_t;

  entry_t entries_q [NUM_ENTRIES_P];

  logic [NUM_ENTRIES_P-1:0] match_vec;
  logic [IDX_W-1:0]         hit_idx;
  logic                     any_free;
  logic [IDX_W-1:0]         free_idx;
  logic [IDX_W-1:0]         rand_idx;
  logic [IDX_W-1:0]         ins_idx;
  logic                     any_valid;
  logic [IDX_W-1:0]         mfu_idx;
  logic [CNT_W_P-1:0]       mfu_cnt;
  logic                     do_lookup;

  // Parallel compare, first free slot, MFU search.
  always_comb begin
    match_vec = '0;
    hit_idx   = '0;
    any_free  = 1'b0;
    free_idx  = '0;
    any_valid = 1'b0;
    mfu_idx   = '0;
    mfu_cnt   = '0;
    occupancy = '0;
    for (int i = 0; i < NUM_ENTRIES_P; i++) begin
      match_vec[i] = entries_q[i].valid && (entries_q[i].row == lookup_row);
      if (match_vec[i]) hit_idx = IDX_W'(i);
      if (!entries_q[i].valid && !any_free) begin
        any_free = 1'b1;
        free_idx = IDX_W'(i);
      end
      if (entries_q[i].valid) begin
        occupancy = occupancy + 1'b1;
        if (!any_valid || entries_q[i].cnt > mfu_cnt) begin
          mfu_idx = IDX_W'(i);
          mfu_cnt = entries_q[i].cnt;
        end
        any_valid = 1'b1;
      end
    end
  end

  assign rand_idx = IDX_W'(victim_rnd % NUM_ENTRIES_P);
  assign ins_idx  = any_free ? free_idx : rand_idx;

  assign mitig_valid    = mitig_req && any_valid;
  assign mitig_row      = entries_q[mfu_idx].row;
  assign mitig_cnt      = mfu_cnt;

  assign do_lookup      = lookup_valid && !mitig_req;
  assign lookup_dropped = lookup_valid && mitig_req;
  assign hit            = do_lookup && (match_vec != '0);
  assign inserted       = do_lookup && (match_vec == '0);
  assign evicted        = inserted && !any_free;
  assign victim_used    = evicted;
  assign evict_row      = entries_q[rand_idx].row;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_ENTRIES_P; i++) begin
        entries_q[i] <= '0;
      end
    end else if (mitig_valid) begin
      entries_q[mfu_idx].valid <= 1'b0;
    end else if (hit) begin
      if (entries_q[hit_idx].cnt != '1) begin
        entries_q[hit_idx].cnt <= entries_q[hit_idx].cnt + 1'b1;
      end
    end else if (inserted) begin
      entries_q[ins_idx] <= '{valid: 1'b1, row: lookup_row, cnt: '0};
    end
  end

  // A row is never held twice.
  a_onehot_match: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(match_vec));

endmodule
