// tb_proteas_top: end-to-end test of proteas_top in the paper's
// 8-mitigations-per-tREFI operating point (target Rowhammer threshold 500):
// RFM_TH = 165/8 = 20 and sampling probability p = 10 % (P_NUM = 6554),
// 16 banks, 16-entry trackers, blast radius 2. The attacked bank receives
// most of the traffic, so the trackers fill and random evictions occur. The
// maximum disturbance of the attacked rows must stay below 1000 ACTs. See
// proteas_top_tb_body.svh for the stimulus and all checks.
module tb_proteas_top;
  import proteas_pkg::*;

  localparam int TB_RFM_TH     = 20;
  localparam int N_REFS        = 1500;
  localparam int TB_BANK0_PCT  = 80;
  localparam int TB_ACT_PCT    = 97;
  localparam bit TB_NEED_EVICT = 1'b1;
  localparam int TB_MAXD_BOUND = 1000;

  proteas_top #(.P_NUM(6554), .RFM_TH(TB_RFM_TH)) dut (.*);

`include "proteas_top_tb_body.svh"

endmodule
