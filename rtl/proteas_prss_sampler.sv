// proteas_prss_sampler: Probabilistic Request Stream Sampling (PRSS).
//
// Every activation (ACT) that reaches the bank is either sent on to the
// tracker lookup (sampled) or bypasses the tracker entirely, with the
// sampling probability p. Only sampled ACTs may update a counter on a hit or
// insert an entry on a miss; the rest are invisible to the tracker. The
// decision comes from a secretly seeded PRNG, so an attacker cannot predict
// which ACTs are looked at.
//
// p is a fixed-point fraction: an ACT is sampled when the low P_FRAC_W bits of
// the PRNG word are below P_NUM, so p = P_NUM / 2^P_FRAC_W. The default
// 655/65536 = 0.9995 % realises the paper's p = 1 %. The fixed-point encoding
// and the rule that the PRNG advances once per ACT are this design's choices.
//
// Timing: combinational from act_valid to sampled/bypassed (the decision
// uses the PRNG value already in its register); the PRNG steps at the clock
// edge that ends the ACT's cycle. Exactly one of sampled/bypassed is high in
// each cycle with act_valid high.
module proteas_prss_sampler
  import proteas_pkg::*;
#(
  parameter int unsigned P_FRAC_W = 16,
  parameter int unsigned P_NUM    = 655
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               seed_load,
  input  logic [RND_W-1:0]   seed,
  input  logic               act_valid,
  output logic               sampled,
  output logic               bypassed
);

  if (P_FRAC_W > RND_W || P_FRAC_W == 0) begin : g_frac_check
    $error("proteas_prss_sampler: P_FRAC_W must be 1..RND_W");
  end

  logic [RND_W-1:0] rnd;
  logic             hit_p;

  proteas_prng u_prng (
    .clk       (clk),
    .rst_n     (rst_n),
    .seed_load (seed_load),
    .seed      (seed),
    .advance   (act_valid),
    .rnd       (rnd)
  );

  // Widened compare so that P_NUM = 2^P_FRAC_W means "always sample".
  assign hit_p       = ({1'b0, rnd[P_FRAC_W-1:0]} < (P_FRAC_W+1)'(P_NUM));
  assign sampled     = act_valid & hit_p;
  assign bypassed    = act_valid & ~hit_p;

endmodule
