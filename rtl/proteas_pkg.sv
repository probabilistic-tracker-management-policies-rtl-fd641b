// proteas_pkg: constants and types shared by the PROTEAS in-DRAM aggressor-row
// tracker and its memory-controller side.
//
// The sizes follow the evaluated DDR4 system: 128K rows per bank (a 17-bit row
// id), 21-bit activation counters, 16-entry trackers and 16 banks. The
// xorshift32 generator and the zero-seed substitute are this design's own
// choices; the paper only asks for a seeded pseudo-random generator.
package proteas_pkg;

  // Row id width: 128K rows per bank, 17-bit row id per tracker entry.
  localparam int unsigned ROW_W        = 17;
  // Activation counter width per tracker entry (21 bits + 17 bits + valid).
  localparam int unsigned CNT_W        = 21;
  // Tracker entries per bank.
  localparam int unsigned NUM_ENTRIES  = 16;
  // Maximum activations per tREFI: (tREFI - tRFC) / tRC = (7800-350)/45.
  localparam int unsigned ACTS_PER_TREFI = 165;
  // Width of the pseudo-random words.
  localparam int unsigned RND_W        = 32;
  // Substitute state used at reset and when a zero seed is loaded
  // (zero is the one fixed point of xorshift32).
  localparam logic [RND_W-1:0] SEED_DEFAULT = 32'h2545_F491;
  // Constant that decorrelates the replacement generator's seed from the
  // sampling generator's seed inside one bank.
  localparam logic [RND_W-1:0] SEED_SPLIT   = 32'h9E37_79B9;

  // One xorshift32 step (Marsaglia shifts 13, 17, 5).
  function automatic logic [RND_W-1:0] xorshift32(input logic [RND_W-1:0] x);
    logic [RND_W-1:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

endpackage
