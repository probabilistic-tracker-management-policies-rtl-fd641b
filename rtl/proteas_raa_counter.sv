// proteas_raa_counter: Rolling Accumulation of ACTs (RAA) counter of one bank,
// kept in the memory controller for Refresh Management (RFM).
//
// The counter counts the ACTs the controller issues to its bank. When it
// reaches RFM_TH it is cleared and an RFM command must be issued to that bank,
// which gives the bank's in-DRAM tracker one extra mitigation. Setting
// RFM_TH = ACTs-per-tREFI / k = 165 / k yields k mitigations per tREFI under
// continuous activation; the default RFM_TH = 165 is k = 1, and 82, 41 and 20
// give the 2, 4 and 8 mitigations per tREFI configurations. The counter is
// 8 bits wide as in the paper's storage estimate.
//
// Not decrementing RAA on REF is this design's reading: the paper only says the
// counter is reset when it reaches the threshold.
//
// Timing: act is sampled at the clock edge. rfm_req is a registered one-cycle
// pulse in the cycle after the ACT that made the count reach RFM_TH; the count
// is 0 in that same cycle.
module proteas_raa_counter #(
  parameter int unsigned RAA_W  = 8,
  parameter int unsigned RFM_TH = 165
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             act,
  output logic             rfm_req,
  output logic [RAA_W-1:0] raa
);

  if (RFM_TH == 0 || RFM_TH >= (1 << RAA_W)) begin : g_th_check
    $error("proteas_raa_counter: RFM_TH must be 1 .. 2^RAA_W-1");
  end

  logic [RAA_W-1:0] raa_q;
  logic             rfm_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      raa_q <= '0;
      rfm_q <= 1'b0;
    end else begin
      rfm_q <= 1'b0;
      if (act) begin
        if (raa_q == RAA_W'(RFM_TH - 1)) begin
          raa_q <= '0;
          rfm_q <= 1'b1;
        end else begin
          raa_q <= raa_q + 1'b1;
        end
      end
    end
  end

  assign raa     = raa_q;
  assign rfm_req = rfm_q;

endmodule
