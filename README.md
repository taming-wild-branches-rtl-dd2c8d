# Bullseye: an H2P side-predictor for TAGE-SC-L, in SystemVerilog

A TAGE-SC-L branch predictor still loses most of its remaining accuracy on
a handful of static branches, the hard-to-predict (H2P) ones. Such a branch
turns up under so many different global histories that TAGE keeps allocating
fresh, low-confidence entries for it and evicting them again before they
learn anything. Making TAGE bigger barely helps.

Bullseye leaves TAGE-SC-L as it is and adds a small subsystem next to it. The
subsystem finds the few branches that TAGE-SC-L keeps getting wrong and hands
them to two small perceptrons dedicated to those branches. A perceptron's
prediction replaces TAGE-SC-L's only after it has shown that it is better.
When a perceptron has been right long enough, TAGE-SC-L stops being trained
on that branch, so the branch no longer pollutes its tables.

This repository holds synthesizable RTL of that subsystem, one self-checking
testbench per module, and an end-to-end testbench. TAGE-SC-L itself is not
included. The subsystem takes TAGE-SC-L's prediction and confidence on input
ports and returns an update enable for it.

## How a branch travels through the design

```
 TAGE-SC-L (external) --- prediction, usefulness, SC override --------------+
        |                                                                    |
        | TAGE-SC-L mispredicted?                                            |
        v                                                                    v
   +---------+  flag   +----------+   +-------------+   +------------------+  +--------------+
   |   hit   |-------->| pc_fifo  |-->| h2p_cache   |<->| local_perceptron |->|              |
   | 64x8    |    |    | 64 (L)   |   | 32 entries  |   +------------------+  | conf_arbiter |--> pred
   +---------+    |    +----------+   +-------------+                          |              |
                  |    +----------+   +-------------+   +-------------------+  |              |
                  +--->| pc_fifo  |-->| h2p_cache   |<->| global_perceptron |->|              |
                       | 64 (G)   |   | 16 entries  |   +-------------------+  +--------------+
                       +----------+   +-------------+                                 |
                                                          tage_filter x2 ------> tage_upd_en
```

1. **Identification (`hit`).** Every resolved branch updates a
   set-associative table (64 sets x 8 ways). Each way counts TAGE-SC-L's
   correct predictions (16 bits) and mispredictions (12 bits) for one static
   branch. A branch is declared H2P-active when all three of these hold:
   * executions >= 2048 + 16·N;
   * mispredictions >= 256;
   * accuracy < f(N).

   N is the number of branches already held by the perceptrons. f(N) falls
   linearly from 1 to about 0.99 while N < 32. Between 32 and 71 it goes from
   0.95 to 0.56 in steps of 0.01. Above 71 it is 0.60. A flagged branch is
   removed from the table.
2. **Queueing (`pc_fifo`, two of them).** The flagged PC goes into a 64-entry
   queue in front of each cache.
3. **Trial and residency (`h2p_cache`, two of them).** The local-side cache
   is fully associative with 32 entries, and the global-side cache has 16. The
   head of a queue goes into a free slot. If there is none, it goes into a slot
   whose entry may be evicted. If neither exists, the PC waits. Each entry
   keeps four counters:
   * a 512-occurrence warm-up;
   * a relative-performance counter (perceptron against TAGE-SC-L);
   * a confidence counter;
   * a stale counter.
4. **Prediction (`local_perceptron`, `global_perceptron`).** A branch that
   hits in a cache is predicted by that side's perceptron from its slot.
5. **Arbitration (`conf_arbiter`).** A perceptron is *strong* when its entry
   is past warm-up, its win-rate over TAGE-SC-L is high, and |output| is above
   its adaptive threshold. A strong perceptron's prediction replaces TAGE-SC-L's.
   When both perceptrons are strong, the local one wins.
6. **Filtering (`tage_filter`, one per side).** A strong perceptron can be
   right 128 times in a row. After that, the branch's outcomes no longer
   update TAGE-SC-L (`tage_upd_en` = 0). The first time the perceptron is not
   strong on the branch, filtering is switched off.

## Timing model

The design handles one branch per clock. For the branch presented in a cycle,
`pred`, `pred_src` and `tage_upd_en` are combinational, computed from the
state left by earlier branches. All state is then updated with the branch's
outcome at that cycle's clock edge: counters, local and global histories,
weights, thresholds and the queues. This is how trace-driven branch-predictor
studies evaluate a predictor: each branch is predicted, then updated at once,
before the next one. It is not a fetch pipeline. There is no speculative
history or checkpoint repair, and the same branch's prediction and update
are never separated by other branches. To use the design in a real front end,
split the lookup from the update and carry the histories from one to the other.
The original design stores exactly those histories between the two steps.

Further latencies:
* A qualifying branch's flag is registered and reaches the queues one cycle
  later.
* The cache can admit the PC in the cycle after that.
* After reset, the local weight tables are cleared one row per cycle in all
  64 tables. `ready` rises after 256 cycles, and branches presented before
  then are ignored.

## The parts that need the closest reading

### Admission thresholds in integer arithmetic (`hit.sv`)

The accuracy test `1 - M/E < f(N)` is evaluated without division:

| N            | test                      |
|--------------|---------------------------|
| N < 32       | `M*3200 > N*E`            |
| 32 <= N <= 71| `M*100 > (N-27)*E`        |
| N > 71       | `M*5 > 2*E`               |

E, the execution count, is formed as correct + incorrect. When either
counter would overflow, both are halved, which keeps their ratio. N is taken
as the occupancy of the local cache, the larger of the two. A branch that is
already resident in either cache never fires.

### Counters of a cache entry (`h2p_cache.sv`)

Each entry stores 6 + 8 + 9 + 16 bits of counters:

* **rp**, 6 bits, signed and saturating. It changes only when exactly one
  of perceptron and TAGE-SC-L is right. It moves +9 on a perceptron win and
  -11 on a TAGE-SC-L win. Its expected drift is positive exactly when the
  perceptron wins more than 55 % of those contests. So `win_high = rp > 0`
  is the arbiter's "win-rate >= 55 %" test, with no divider and no win/loss
  counts.
* **conf**, 8 bits, with linear growth and exponential decay. A contest
  whose winner agrees with the trend (the sign of rp) adds one, saturating
  at 255. A contest against the trend halves it.
* **warm**, 9 bits. It counts references up to 511. Until then the entry
  cannot be evicted and its perceptron cannot override.
* **stale**, 16 bits. It counts branches since the entry was last referenced
  and saturates at 65535.

An entry may be evicted when it is warm and either of these holds:
* conf = 255 with rp <= 0, meaning confidence has saturated in favour of
  TAGE-SC-L;
* stale = 65535.

Entries are evicted only to admit a waiting PC, and never the entry
referenced in the same cycle.

### Hashed-window local perceptron (`local_perceptron.sv`)

* **History.** Each slot keeps its branch's last 124 outcomes.
* **Features.** Feature i (0..31) is the parity of a window of that history.
  The window starts at bit 3i and is 4, 8, 16, 32, 64, 64, ... bits wide,
  cut off at bit 123.
* **Weight lookup.** Each feature picks one 10-bit weight in each of two
  256-entry tables, so there are 64 tables in all, shared by all slots. The
  index is
  `xorshift32(fold32(PC) ^ (2i+k+1)*0x9E3779B9 ^ parity_i)[7:0]`, for hash
  k = 0 or 1. An aliased weight in one table is usually outvoted by its twin.
* **Output.** The sum of the 64 selected weights plus a per-slot 12-bit bias.
  The bias is one of two words, chosen by the newest outcome.
* **Training.** It happens on a misprediction or when |out| <= theta. Every
  selected weight and the bias step toward the outcome, saturating.
* **Threshold.** theta is per slot (10 bits) and adapts as in O-GEHL. A 7-bit
  signed counter goes up on a misprediction and down on a correct low-margin
  prediction. At its ends, theta moves by one and the counter restarts at 0.
  theta starts at 64.

### Folded global perceptron (`global_perceptron.sv`)

* **History.** A 128-bit global history register is shifted on every branch.
  It is XOR-folded to W_g = 128 bits, which is the identity at the default
  sizes.
* **Weights and output.** Each of the 16 slots owns 128 signed 12-bit
  weights. out = bias + Σ ±w_i, using +w_i when history bit i is 1. The
  per-slot bias is one of 16 10-bit words, selected by the four newest
  outcomes.
* **Training.** It happens on a misprediction or when |out| <= theta:
  w_i += (x_i == outcome) ? 1 : -1, and the bias steps toward the outcome.
* **Threshold.** theta is per slot (14 bits), starts at 128, and follows the
  same rule as in the local perceptron.
* **Admission.** A newly admitted slot starts with zero weights.

### Arbiter rules (`conf_arbiter.sv`)

The original description gives two decision rules:
* the perceptron wins whenever it is strong;
* the perceptron wins only if TAGE-SC-L is not strong.

TAGE-SC-L counts as strong when its provider entry's usefulness is 3, or when
the statistical corrector overrode it with a non-zero magnitude. Parameter
`TAGE_GATE` selects between the rules. It defaults to 0, the first rule,
which is the one the architecture overview and its flow chart describe.

## Sizes

All defaults are the sizes of the original storage budget. None is scaled
down.

| Part | Default size |
|------|--------------|
| Identification table | 2^6 sets x 8 ways; 10-bit stored tag (16-bit tag, 6 bits used as index); 16-bit correct and 12-bit incorrect counters |
| PC queues | 2 x 64 x 62-bit PCs |
| Local side | 32 slots; 124-bit history per slot; 64 tables x 256 x 10-bit weights; 2 x 12-bit biases per slot; 10 + 7 bit threshold state per slot |
| Global side | 16 slots; 128-bit global history; 128 x 12-bit weights per slot; 16 x 10-bit biases per slot; 14 + 7 bit threshold state per slot |
| Per cache entry | 62-bit PC; 6 + 8 + 9 + 16 bits of counters; plus valid bit, 8-bit streak counter and filter bit (not in the original budget) |

The PC is 62 bits wide: a 64-bit address without its two always-zero bits.

## Where this RTL departs from, or fills in, the original description

* **Local windows.** The original text asks for windows that grow in size,
  start at a constant stride and do not overlap. It also says they cover a
  few hundred outcomes. Its storage table, however, gives 64 weight tables
  and a 124-bit history. Thirty-two growing, non-overlapping windows cannot
  fit in 124 bits. The RTL follows the table, so its windows overlap
  (stride 3).
* **Thresholds.** The text calls theta "global" and "shared", but the
  storage table budgets threshold counters per entry. The RTL keeps one
  theta per slot.
* **f(0).** The text says the accuracy ceiling starts above 95 % when no
  branch is resident. The formula gives f(0) = 1. The RTL follows the formula.
* **Counter meanings and sizes.** The win-rate mechanism (+9/−11) is this
  design's own. So are the assignment of the 6/8/9/16 counter bits, the
  "511 references" and "65535 branches" boundaries of the 9- and 16-bit
  counters, and the streak counter of the filter.
* **Choices the description leaves open.** All of these are this design's
  own:
  * hash seeds and the xor-shift constants;
  * the tag fold;
  * the bias indices;
  * HIT replacement (first invalid way, else the way with the fewest
    mispredictions);
  * halving on overflow;
  * the initial theta;
  * dropping a PC that finds its queue full;
  * clearing a slot's state on admission;
  * the local-over-global priority when both perceptrons are strong.
* **TAGE-SC-L.** It is not part of the RTL. The scaled-up 159 kB baseline
  is an existing design that the original work only re-sizes.

## Files

| File | Contents |
|------|----------|
| `rtl/bullseye_pkg.sv` | PC type, `conf_t`, `pred_src_t`, `events_t`, xor-shift hash and PC folds |
| `rtl/hit.sv` | identification table |
| `rtl/pc_fifo.sv` | PC queue |
| `rtl/h2p_cache.sv` | H2P cache with trial, confidence and eviction |
| `rtl/local_perceptron.sv` | hashed-window local perceptron |
| `rtl/global_perceptron.sv` | folded global perceptron |
| `rtl/conf_arbiter.sv` | confidence arbiter |
| `rtl/tage_filter.sv` | TAGE-SC-L update filter |
| `rtl/bullseye_top.sv` | the whole subsystem |
| `tb/tb_<module>.sv` | self-checking testbench of each module |

The top's `events` output carries one pulse per mechanism: flag, queue drop,
admission and eviction on each side, override, and filtered update. It is
meant for monitoring and coverage.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. To run a module's testbench:

```
verilator --binary --timing --assert -Mdir obj_hit \
    rtl/bullseye_pkg.sv rtl/hit.sv tb/tb_hit.sv --top-module tb_hit
./obj_hit/Vtb_hit
```

To run the whole design:

```
verilator --binary --timing --assert -Mdir obj_top \
    rtl/bullseye_pkg.sv rtl/hit.sv rtl/pc_fifo.sv rtl/h2p_cache.sv \
    rtl/local_perceptron.sv rtl/global_perceptron.sv rtl/conf_arbiter.sv \
    rtl/tage_filter.sv rtl/bullseye_top.sv tb/tb_bullseye_top.sv \
    --top-module tb_bullseye_top
./obj_top/Vtb_bullseye_top
```

`tb_bullseye_top` runs the design at its default sizes, about 280 000
branches in a few seconds.

**What it drives.** The testbench includes a behavioural stand-in for
TAGE-SC-L:
* 32, later 36, hard branches with short periodic patterns, on which the
  stand-in is wrong 25 % of the time;
* one easy branch, on which the stand-in is always right.

**What it shows.** It checks each of these along the way:
* the first flag comes exactly at the 2048th execution;
* all hard branches are admitted, and the global-side overflow waits in its
  queue;
* after warm-up the combined predictor gets at least 90 % of the hard
  branches right, where the stand-in gets 75 %;
* filtering engages;
* stale entries are evicted on both sides;
* new hard branches displace stale local entries.

It also checks these invariants on every branch:
* a TAGE-SC-L-sourced prediction equals TAGE-SC-L's;
* the easy branch is never flagged or overridden;
* `tage_upd_en` is low exactly when a branch is filtered.

`tb_bullseye_top_small` runs a second configuration of the whole design:
* 4 local and 2 global slots;
* 2-entry queues;
* the alternative arbiter rule (`TAGE_GATE = 1`).

Twelve hard branches qualify together, so flagged PCs overflow the queues and
are dropped. The stand-in TAGE-SC-L claims strong confidence on half of the
instances, and the testbench checks that no perceptron overrides it on those.

## How far to trust it

**What the testbenches check.** The per-module testbenches compare against
reference models written independently in the testbenches:
* the admission rule, evaluated with real arithmetic;
* the rp/conf counters;
* full local and global perceptron models: window parity, hashing, sums,
  training and thresholds;
* an exhaustive check of the arbiter under both rules.

Each testbench has been shown to fail on a deliberately broken copy of its
module.

**What has not been done.** The design has not been measured on real branch
traces. No claim is made that it reproduces the accuracy the original work
reports: about 3.40 mispredictions per kilo-instruction, against 3.45 for
the 159 kB TAGE-SC-L alone. No timing closure has been attempted. The local
perceptron sums 64 weights and the global one 128 weights in a single
combinational path, which a real implementation would pipeline.
