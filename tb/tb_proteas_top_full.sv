// tb_proteas_top_full: end-to-end test of proteas_top with every parameter at
// its default - 16 banks, 16-entry trackers with 17-bit rows and 21-bit
// counters, p = 655/65536 (1 %), blast radius 2, RFM_TH = 165 - over one
// full refresh window (8192 tREFI). At p = 1 % the trackers rarely fill, so
// a random eviction is reported but not required here (tb_proteas_top
// exercises it). The maximum disturbance of the attacked rows must stay below 4800
// ACTs (the lowest published LPDDR4 threshold). See proteas_top_tb_body.svh
// for the stimulus and all checks.
module tb_proteas_top_full;
  import proteas_pkg::*;

  localparam int TB_RFM_TH     = ACTS_PER_TREFI;
  localparam int N_REFS        = 8192;
  localparam int TB_BANK0_PCT  = 90;
  localparam int TB_ACT_PCT    = 100;
  localparam bit TB_NEED_EVICT = 1'b0;
  localparam int TB_MAXD_BOUND = 4800;

  proteas_top dut (.*);

`include "proteas_top_tb_body.svh"

endmodule
