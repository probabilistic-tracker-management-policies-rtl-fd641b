# PROTEAS: probabilistic management for small in-DRAM Rowhammer trackers

Rowhammer bit flips happen when one DRAM row is activated many times before
its neighbours are refreshed. Commodity DRAM defends against this with a tiny
per-bank *tracker* (TRR-style, a few tens of entries). On each refresh, the
DRAM refreshes the neighbours of the row the tracker has counted most often.
Such a tracker is easy to fool. An attacker who activates more distinct rows
than the tracker holds keeps pushing the hammered rows out of it (thrashing).
An attacker who knows when the tracker samples can time the hammering to fall
between samples.

PROTEAS keeps the small tracker but changes two of the rules that manage it:

* **Request-stream sampling (PRSS).** Each activation (ACT) consults the
  tracker only with a small probability *p*. The decision comes from a
  pseudo-random generator with a secret, replaceable seed. The other ACTs skip
  the tracker entirely. A row that is hammered hard is still very likely to be
  sampled. But the stream of insertions is now slow enough that the tracker no
  longer thrashes.
* **Random replacement.** When a sampled ACT misses and the tracker is full,
  a randomly chosen entry is evicted. The least-counted entry is not used, so
  an attacker cannot predict which entry goes.

Everything else stays conventional. A hit increments the entry's counter. On
each mitigation opportunity (a REF, or an RFM in DDR5), the entry with the
highest counter is removed and its neighbour rows are refreshed. This RTL
implements one rank: one such tracker per bank, plus the memory-controller
counters that issue extra RFM commands.

## One bank, step by step

```
              +-----------+  sampled   +--------------------------------+
 ACT(row) --->|  sampler  |----------->| tracker table (16 x valid,     |
              |  PRNG #1  |            |   row[16:0], count[20:0])      |
              +-----------+            |  hit  -> count+1 (saturating)  |
                   | bypassed          |  miss -> insert, count = 0:    |
                   v                   |     a free entry if any, else  |
                (ignored)              |     entry (PRNG #2 mod 16)     |
                                       |                                |
 REF / RFM --------------------------->|  mitigation -> highest count,  |
                                       |     invalidate, report row     |
                                       +---------------+----------------+
                                                       | aggressor row
                                               +-------v--------+
                                               | victim refresh |--> row-2, row-1,
                                               +----------------+    row+1, row+2
```

*Sampler* (`proteas_prss_sampler`). An ACT is sampled when the low 16 bits
of the sampler's PRNG word are below `P_NUM`. So the probability is
`P_NUM/65536`. The default `P_NUM = 655` gives 0.9995 %, the 1 % rate that
the analysis finds best when there is one mitigation per refresh interval.
The PRNG steps once per ACT. Sampling is a combinational decision, so it adds
no cycle to the ACT.

*Tracker table* (`proteas_tracker_table`). The table is fully associative:
all 16 rows are compared in parallel in the cycle of the lookup. Lookup,
update, insertion, eviction and mitigation take one cycle each. Only one of
them happens in a given cycle. A free entry is always preferred over an
eviction; among free entries the lowest index wins. When the table is full,
the victim is `rnd mod NUM_ENTRIES`, where `rnd` is the replacement PRNG's
word. That PRNG advances only when it is used. The mitigation search takes
the highest counter; on a tie the lowest index wins. The entry is invalidated
at the clock edge. If the table is empty, a mitigation request does nothing.

*Victim refresh* (`proteas_victim_refresh`). The aggressor row is mitigated
by refreshing the rows within the blast radius (default 2, which also covers
distance-2 "Half-Double" victims). One victim is issued per cycle: row−2,
row−1, row+1, row+2. The first appears the cycle after the mitigation. A
victim outside the bank (below 0 or above 131071) is skipped, but its cycle
still passes. The bank is therefore busy for exactly `2*BLAST_RADIUS` cycles.

*PRNGs* (`proteas_prng`). Each bank has two xorshift32 generators, one for
sampling and one for replacement. Both load from the bank's secret seed; the
replacement generator gets the seed XOR a constant, so the two streams
differ. `seed_load` may replace the seed at any time. A zero seed is replaced
by a fixed non-zero constant, because zero would lock xorshift.

## Why the sampling rate matters

The sampling rate has to match the mitigation rate. If *p* is too high, the
tracker fills faster than mitigations empty it, and it thrashes again. If *p*
is too low, most ACTs of an aggressor are never seen, and the tracker sits
empty when a mitigation comes. Suppose about half of the sampled ACTs miss.
Then the insertion rate equals the mitigation rate when *p* ≈ 2 × (mitigations
per ACT). There are 165 ACTs per refresh interval (tREFI). This gives the
following operating points. `P_NUM` and `RFM_TH` are the parameters to set.

| mitigations per tREFI | p     | `P_NUM` | `RFM_TH` (165/k) | suited to a Rowhammer threshold of |
|-----------------------|-------|---------|------------------|--------------------|
| 1                     | 1 %   | 655     | 165              | 4.9K–9K (today's DDR4) |
| 2                     | 3 %   | 1966    | 82               | —                  |
| 4                     | 5 %   | 3277    | 41               | 1K                 |
| 8                     | 10 %  | 6554    | 20               | 500                |

## Memory-controller side: RAA counters and RFM

DDR5 lets the controller give the DRAM extra mitigation opportunities with
RFM commands. `proteas_raa_counter` keeps one 8-bit rolling count of ACTs per
bank. When the count reaches `RFM_TH`, it clears and requests an RFM for that
bank. The request is a registered pulse in the cycle after the ACT that
reached the threshold.

`proteas_top` joins the controller side and the DRAM side over a command bus
that carries one command per cycle. The arbitration below is this design's
own choice:

1. an RFM queued for a bank that is not busy refreshing victims (lowest bank
   first). It asks that bank's tracker for one mitigation;
2. otherwise a REF, which is accepted only when no bank is busy
   (`ref_ready`). It asks every bank's tracker for one mitigation;
3. otherwise the ACT (`act_valid`/`act_ready`). It is held off while its bank
   is busy or has an RFM queued, or while an RFM or REF takes the bus.

`act_ready` and `ref_ready` follow valid/ready rules: a command is taken at
the clock edge where both are high. The controller scheduler that produces
ACTs and REFs is not part of this RTL, and neither are the DRAM arrays that
carry out the refreshes. The top's ports stand in for both. `vref_valid[b]`
and `vref_row[b]` are the refresh requests for bank `b`. `mitig_*` and `ev_*`
show what each tracker did, for monitoring.

## Files and hierarchy

```
proteas_top                      rank: NUM_BANKS x (RAA counter + bank tracker)
├── proteas_raa_counter          per bank, memory-controller side
└── proteas_bank_tracker         per bank, DRAM side
    ├── proteas_prss_sampler
    │   └── proteas_prng         sampling PRNG
    ├── proteas_prng             replacement PRNG
    ├── proteas_tracker_table
    └── proteas_victim_refresh
proteas_pkg                      widths, the xorshift step, seed constants
```

## Parameters

| parameter        | default | meaning |
|------------------|---------|---------|
| `NUM_BANKS`      | 16      | banks per rank (DDR4 system evaluated; 32 for DDR5) |
| `NUM_ENTRIES_P`  | 16      | tracker entries per bank |
| `ROW_W_P`        | 17      | row id bits (128K rows per bank) |
| `CNT_W_P`        | 21      | counter bits per entry |
| `P_FRAC_W`, `P_NUM` | 16, 655 | sampling probability `P_NUM / 2^P_FRAC_W` |
| `BLAST_RADIUS`   | 2       | victim rows on each side of an aggressor |
| `RAA_W`, `RFM_TH`| 8, 165  | RAA counter width and RFM threshold |

At the defaults, each tracker stores 16 × 39 bits. For 16 banks that is
9,984 bits (about 1.25 KB per rank). The two xorshift generators add 64
flip-flops per bank.

## Where this RTL differs from, or goes beyond, the description

* **REF and RFM both mitigate.** REF always asks for a mitigation, and RFM
  adds one per `RFM_TH` ACTs to a bank. With the default `RFM_TH = 165`, a
  bank under continuous activation therefore gets about two mitigations per
  tREFI, not one. The source is itself unclear on how REF and RFM add up. It
  derives `RFM_TH = 165/k` in one place and quotes thresholds of 166 and 83
  for one and two mitigations in another. This design follows `165/k`.
  Choose `RFM_TH` to fit how your controller counts. The RAA counter is not
  decremented by REF.
* **Own choices where the description is silent:** the generator type
  (xorshift32) and seed handling; the fixed-point probability encoding; the
  tie-breaking rules; saturating counters; one victim refresh per cycle, with
  out-of-bank victims skipped; the command-bus priority RFM > REF > ACT; a
  synchronous active-low reset that empties every tracker.
* **ACT during a mitigation.** The table drops a lookup that arrives in the
  same cycle as a mitigation request (`lookup_dropped`). The top never
  produces that case, and assertions in `proteas_bank_tracker` and
  `proteas_top` check the command rules.
* **Seed source and schedule.** The seed is described only as secret and
  changeable from time to time. Where it comes from and how often
  `seed_load` is pulsed are left to the surrounding logic.
* Refreshing victim rows inside the array, and the DRAM timing (tRFC, tRC),
  are outside this RTL. Here "busy" is a cycle count, not a time in
  nanoseconds.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops on a watchdog.

| testbench | what it shows |
|-----------|---------------|
| `tb_proteas_prng` | reset value; the published xorshift32 outputs for seed 1; 2000 steps against a model; hold, reload and zero seed |
| `tb_proteas_prss_sampler` | every decision against a model; measured rate ≈ 1 % and ≈ 50 % over 180K ACTs |
| `tb_proteas_tracker_table` | cycle-by-cycle match with a model of the five policies (16 entries, and 5 entries with 3-bit counters so that saturation occurs) |
| `tb_proteas_victim_refresh` | victim order, timing, edge rows; radius 1 and 2 |
| `tb_proteas_raa_counter` | one RFM per `RFM_TH` ACTs and the pulse timing, for 165 and 20 |
| `tb_proteas_bank_tracker` | the whole bank against a model of both PRNGs, the table and the victim stream |
| `tb_proteas_top` | whole rank at 8 mitigations/tREFI (p = 10 %, `RFM_TH` = 20) under a Blacksmith-like attack on bank 0; the ready rules and the victim streams of all banks; every mechanism counted (sampling, bypass, hit, insert, random eviction, REF and RFM mitigation, REF on an empty tracker, ACT and REF stalls, edge skip, seed reload); maximum disturbance < 1000 |
| `tb_proteas_top_full` | same checks with every parameter at its default, over one 64 ms refresh window (8192 tREFI); maximum disturbance < 4800 |
| `tb_proteas_attack_patterns` | 500 attack patterns (10 uniform and 240 non-uniform, each aligned to tREFI and not) against a bank at 1, 2, 4 and 8 mitigations per tREFI, over 1024 tREFI each; measured sampling rates |
| `tb_proteas_tracker_sizes` | trackers of 2, 4, 16, 32, 64 and 128 entries at p = 1 %, one mitigation per tREFI, on 100 of those patterns; larger trackers must not do worse at the ends of the range |

"Maximum disturbance" is the largest number of ACTs any attacked row receives
before it is mitigated. The 500-pattern run uses one fixed seed. Its worst
cases, next to those reported by the analysis this design follows:

| mitigations per tREFI | p    | worst case in this RTL | reported |
|-----------------------|------|------------------------|----------|
| 1                     | 1 %  | 1,915                  | ~2K      |
| 2                     | 3 %  | 846                    | ~1K      |
| 4                     | 5 %  | 485                    | ~530     |
| 8                     | 10 % | 316                    | ~290     |

With the default p = 1 % and one mitigation per tREFI, the size sweep on its
100 patterns gave worst cases of 1,784 (2 entries), 1,917 (4), 1,539 (16),
1,396 (32, 64 and 128). The published analysis shows the same trend: about 2.5K for the
smallest trackers, 2K at 16 entries and about 1.4K at 128. The default of 16
entries keeps the worst case below half of today's DDR4 threshold.

The runs cover 1024 tREFI per pattern and use only one seed. These figures
therefore show that the RTL behaves as intended; they are not a security
evaluation. The attack-pattern testbench fails if a worst case reaches 4,800, 2,400, 1,200
or 1,000 ACTs (k = 1, 2, 4, 8). It also checks that each tracker samples
within 5 % of its p.

To simulate with plain Verilator, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
    -y rtl -y tb +libext+.sv -Irtl -Itb \
    --top-module tb_proteas_top_full rtl/proteas_pkg.sv tb/tb_proteas_top_full.sv
./obj_dir/Vtb_proteas_top_full
```

Replace the top module with any testbench name. The full-size rank test runs
in about 10 s, the 500-pattern test in about three minutes and the size sweep in about
one and a half.
