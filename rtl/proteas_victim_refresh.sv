// proteas_victim_refresh: mitigative refresh of the victims of one aggressor.
//
// A mitigation refreshes the rows around the selected aggressor row within the
// blast radius: BLAST_RADIUS rows below and BLAST_RADIUS rows above it
// (default radius 2, so four victim rows, which also covers Half-Double
// style distance-2 victims). The aggressor row itself is not refreshed.
//
// Order and rate are this design's choice: one victim per clock cycle, in the
// order row-BR, ..., row-1, row+1, ..., row+BR. A victim that would fall
// outside the bank (below row 0 or above the last row) is skipped: its cycle
// passes with ref_valid low, so the sequence always lasts 2*BLAST_RADIUS
// cycles.
//
// Timing: start is accepted when busy is low. The first victim appears on
// ref_valid/ref_row in the cycle after start, the last 2*BLAST_RADIUS cycles
// after start; busy is high for exactly those 2*BLAST_RADIUS cycles. A start
// while busy is a protocol error (asserted) and is ignored.
module proteas_victim_refresh
  import proteas_pkg::*;
#(
  parameter int unsigned ROW_W_P      = ROW_W,
  parameter int unsigned BLAST_RADIUS = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [ROW_W_P-1:0] aggr_row,
  output logic               busy,
  output logic               ref_valid,
  output logic [ROW_W_P-1:0] ref_row
);

  localparam int unsigned NVICT = 2 * BLAST_RADIUS;
  localparam int unsigned STEP_W = $clog2(NVICT + 1);

  if (BLAST_RADIUS == 0) begin : g_br_check
    $error("proteas_victim_refresh: BLAST_RADIUS must be at least 1");
  end

  logic [ROW_W_P-1:0] aggr_q;
  logic [STEP_W-1:0]  step_q;   // index of the victim being issued
  logic               busy_q;

  // Signed distance of victim number step_q from the aggressor, and the
  // victim row computed one bit wider so that under/overflow is visible.
  logic               below;
  logic [ROW_W_P:0]   offset;
  logic [ROW_W_P:0]   victim;
  logic               in_range;

  always_comb begin
    below = (step_q < STEP_W'(BLAST_RADIUS));
    if (below) begin
      offset   = (ROW_W_P+1)'(int'(BLAST_RADIUS) - int'(step_q));
      victim = {1'b0, aggr_q} - offset;
    end else begin
      offset   = (ROW_W_P+1)'(int'(step_q) - int'(BLAST_RADIUS) + 1);
      victim = {1'b0, aggr_q} + offset;
    end
    // Bit ROW_W_P set means the result left 0 .. 2^ROW_W_P-1.
    in_range = ~victim[ROW_W_P];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      step_q <= '0;
      aggr_q <= '0;
    end else if (!busy_q) begin
      if (start) begin
        busy_q <= 1'b1;
        step_q <= '0;
        aggr_q <= aggr_row;
      end
    end else if (step_q == STEP_W'(NVICT - 1)) begin
      busy_q <= 1'b0;
      step_q <= '0;
    end else begin
      step_q <= step_q + 1'b1;
    end
  end

  assign busy      = busy_q;
  assign ref_valid = busy_q && in_range;
  assign ref_row   = victim[ROW_W_P-1:0];

  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    !(start && busy_q));

endmodule
