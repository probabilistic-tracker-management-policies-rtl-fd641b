// proteas_prng: seeded pseudo-random number generator for PROTEAS.
//
// Each bank holds two of these: one drives the request-stream sampler, the
// other picks the random eviction victim. The secret seed lives in the DRAM
// and can be replaced at any time through seed_load, so an attacker cannot
// learn or align with the sequence.
//
// The generator is xorshift32: three shift-XOR steps per advance, a few
// hundred gates, period 2^32-1. Its type is this design's choice; the paper
// only asks for a seeded PRNG of a few thousand gates at most.
//
// Interface and timing:
//   rnd        current value (registered); valid from the cycle after reset.
//   advance    when high, rnd moves to xorshift32(rnd) at the next edge.
//   seed_load  when high, rnd takes seed at the next edge (takes priority over
//              advance). A zero seed is replaced by SEED_DEFAULT, because zero
//              is the fixed point of xorshift.
//   rst_n      synchronous, active low; loads SEED_DEFAULT.
module proteas_prng
  import proteas_pkg::*;
#(
  parameter int unsigned WIDTH = RND_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             seed_load,
  input  logic [WIDTH-1:0] seed,
  input  logic             advance,
  output logic [WIDTH-1:0] rnd
);

  // xorshift32 is defined for 32-bit state only.
  if (WIDTH != 32) begin : g_width_check
    $error("proteas_prng: WIDTH must be 32");
  end

  logic [WIDTH-1:0] state_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= SEED_DEFAULT;
    end else if (seed_load) begin
      state_q <= (seed == '0) ? SEED_DEFAULT : seed;
    end else if (advance) begin
      state_q <= xorshift32(state_q);
    end
  end

  assign rnd = state_q;

  // The all-zero state would lock the generator.
  a_nonzero: assert property (@(posedge clk) disable iff (!rst_n) state_q != '0);

endmodule
