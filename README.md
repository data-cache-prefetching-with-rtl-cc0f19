# Perceptron-filtered data cache prefetcher

A hardware prefetcher guesses which cache lines the program will need soon and
fetches them early. A cheap prefetcher (stride detection, or a Markov table of
which miss followed which) makes many guesses. When it guesses wrong, the
wasted fetches use memory bandwidth and push useful lines out of the cache.

This design puts a second stage behind the cheap prefetcher. That stage is a
single perceptron. For every guess it looks at four numbers taken from the
recent miss history. It adds up those numbers times learned weights, and the
guess is sent to memory only if the sum is positive. The design then watches
what the program actually references and trains the weights with the classic
perceptron rule:

- an accepted prefetch that is never used pushes the weights down;
- a rejected guess that the program asks for soon after pushes them up.

The result is a filter that adapts on-line to each program. The first stage
supplies the guesses; the perceptron learns which kinds of guesses are worth
acting on.

All of it is written as synthesizable SystemVerilog in `rtl/`, with a
self-checking testbench per module in `tb/`. The top module is
`perceptron_prefetcher`.

## The path of one miss

The prefetcher sits beside a data cache and sees every reference as a
`(line, pc, miss)` triple. Hits only feed the two training tables. A miss
runs the whole engine, which works through five states:

| state  | cycles | what happens |
|--------|--------|--------------|
| IDLE   | 1 | miss accepted; pushed into the global history buffer (GHB); Markov index table updated |
| FIRST  | 1 (stride) or up to 5 (Markov) | first-level prefetcher produces up to DEGREE suggestions |
| SCAN   | ceil((count + oldest mod 32) / 32), i.e. 16–17 with a full GHB, plus 2 | feature extractor walks the GHB once and builds four features for every suggestion |
| DECIDE | 1 | one perceptron lane per suggestion; all lanes decide in the same cycle |
| RECORD | 1 per suggestion | accepted lines go to the request queue and the accept table; denied lines go to the deny table |

With a full GHB, a Markov trigger takes about 25 cycles from miss to the last
recorded decision. A stride trigger takes about 21. While the engine is busy,
`acc_ready` is low for misses, and the cache must hold the next miss back.
Hits are always accepted, so the training tables never miss a reference. If
the request queue is full, RECORD waits.

## Global history buffer

The GHB is a 512-entry ring of past miss lines. Each entry holds a 45-bit line
address and a 9-bit link to the previous entry with the same address. The
total is 3.375 KB.

It has three point-read ports, which the Markov walk and the top use. It also
has one row port that returns 32 consecutive, aligned entries. The buffer is
therefore organised as 16 rows of 32 entries. `count` says how many entries
are valid and `newest` points at the last one written.

## First level

Two first-level prefetchers are available. The parameter `KIND` selects one.

- **Stride** (`PF_STRIDE`, degree 2). It looks at the last three misses. If
  the two differences between them are equal and non-zero, it suggests
  `L + s` and `L + 2s`, where `L` is the newest miss and `s` the stride.
- **Markov** (`PF_MARKOV`, degree 4, the default). A 256-entry index table
  maps a line address to its newest GHB entry. It is hashed by XOR of the low
  two address bytes and checked with a 22-bit tag. From that entry, the
  prefetcher follows the GHB links backwards, one element per cycle. Each
  earlier occurrence of `L` was followed by some other miss, and that miss is
  a suggestion. Up to four distinct suggestions are made, most recent first.
  A link is followed only while the entry it reaches still holds `L`, is
  inside the valid part of the ring, and is older than the previous one. This
  way, an overwritten slot cannot send the walk off course.

## The four features

This is the least obvious part of the design. For a suggested line `A`, with
`L` the miss that triggered, and the GHB read from oldest to newest:

| input | name | definition (8 bits each, saturating at 255) |
|-------|------|----------------------------------------------|
| x1 | distance   | how many entries back from the newest the most recent copy of `A` is (0 = newest); 255 if `A` is not in the GHB |
| x2 | transition | see below |
| x3 | xor        | `A[7:0] ^ PC[7:0]` |
| x4 | occurrence | number of GHB entries equal to `A` |

**Transition probability (x2)** estimates how often `A` has come soon after
`L` in the past. Every occurrence of `L` in the GHB, the newest one included,
casts weights on the entries that follow it:

- the entry right after it gets 128;
- the next one gets 64, and so on down to 1 for the 8th entry;
- the run stops early at the next occurrence of `L`.

The weights that land on entries equal to `A` are added up. The sum is
divided by `k`, the number of occurrences of `L`.

Written as in the original proposal, the weight is 2^(n−m+1) with n = 7, where m counts
positions after the occurrence of `L`. The result is a weighted frequency of
"`A` within a few misses after `L`", scaled to fit 8 bits. For example, if
every one of the `k` occurrences of `L` is followed directly by `A`, then
x2 = 128.

**How the scan works in hardware.** All features for all four lanes come from
one pass over the ring. Each cycle, one 32-entry row is read. Per entry and
per lane, the extractor keeps:

- a comparator against `A`, which drives the distance and the occurrence
  count;
- a comparator against `L`, which restarts a per-lane "distance since the
  last `L`" counter that carries across rows;
- an adder that adds the weight when the entry matches `A` and lies inside a
  window.

The pass starts at the row holding the oldest valid entry. Entries outside the
valid range are masked. When the ring has wrapped and the oldest entry is not
at the start of a row, that first row is read again at the end to pick up its
newest part. One extra cycle performs the divide by `k`.

## Perceptron

There are five 8-bit signed weights: w1..w4 and a bias θ on a constant input.
Four lanes share them, one lane per suggestion of a degree-4 prefetcher, so a
whole trigger is judged in one cycle.

Each lane computes `y = Σ w_j·x_j + θ·256` in 21-bit arithmetic and accepts
when `y > 0`. Features count as fractions x/256 of full scale, and the
constant input counts as 256.

Training uses `w_j += α(d − r)·x_j` with α = 1/16:

- a weight moves by `x_j >> 4`;
- θ moves by 16;
- all weights saturate at −128 and +127.

At reset, w1..w4 = 0 and θ = 1. An untrained filter therefore accepts
everything, which is the plain first-level behaviour, and it learns to deny
from there.

## Accept table and deny table

Every decision is remembered so that it can later be graded. An entry in
either table is 85 bits: the 45-bit line, the 32-bit feature vector it was
judged with, and an 8-bit age counter. Both tables are written round-robin.

**Accept table** (256 entries). It holds the prefetches that were sent.

- Each cache reference adds one to the age of every live entry.
- A reference to an entry's line retires the entry as *used*. The decision was
  right, so there is no training.
- If the age counter overflows (256 references with no use), or the slot is
  overwritten, the entry is *expired*. The prefetch was wrong, and its
  features train with d − r = −1.
- At most one training step leaves per cycle. An overwrite goes first;
  otherwise the lowest-numbered overflowed entry goes.

**Deny table** (32 entries). It holds the suggestions that were rejected.

- The age counter counts misses (prefetch triggers), not references.
- If the line is referenced before 32 misses have passed, the deny was wrong.
  The entry is marked, and its features train with d − r = +1.
- If 32 misses pass, or the slot is overwritten, the deny was right and the
  entry is dropped without training.
- A marked entry waits until the perceptron takes its step. If the slot is
  overwritten first, the step is lost.

When both tables have a training step in the same cycle, the accept table goes
first.

The two tables total 2.99 KB.

## Prefetch requests

Accepted lines go into an 8-entry FIFO, the cache read queue. It hands them to
the next level with a `pf_valid/pf_ready` handshake. An assertion checks that
the head entry stays stable while `pf_valid` is high and `pf_ready` is low.

## Top-level interface

| port | dir | width | meaning |
|------|-----|-------|---------|
| `acc_valid`, `acc_ready` | in, out | 1 | one cache reference per handshake; `acc_ready` is low only for a miss while the engine is busy |
| `acc_miss` | in | 1 | the reference missed |
| `acc_line` | in | 45 | line address |
| `acc_pc` | in | 48 | PC of the load or store |
| `pf_valid`, `pf_ready`, `pf_line` | out, in, out | 1, 1, 45 | prefetch requests |
| `stats` | out | struct | 32-bit counters: triggers, suggestions, accepts, denies, up- and down-training steps, stall cycles |
| `weights`, `theta` | out | 4×8, 8 | current perceptron state |

Parameters (defaults in brackets): `KIND` [PF_MARKOV], `GHB_ENTRIES` [512],
`IT_ENTRIES` [256], `AT_ENTRIES` [256], `DT_ENTRIES` [32], `DT_LIMIT` [32],
`SCAN_W` [32], `Q_DEPTH` [8].

Storage at the defaults:

- GHB: 3.375 KB;
- index table: 1 KB;
- accept and deny tables: 2.99 KB;
- weights: 5 bytes.

## Where this RTL departs from, or fills in, the source description

- **Cycle timing is this design's.** The source only asks for a decision
  "in several clock cycles". The 16–17-cycle GHB scan, the one-element-per-cycle
  Markov walk and the one-decision-per-cycle recording are choices made here.
  So is holding off misses while the engine is busy. Misses that arrive during
  that time are not dropped; the cache must stall them. `SCAN_W` sets the scan
  rate and must divide `GHB_ENTRIES`.
- **Accept-table age counts references.** One passage says unused entries
  expire after 256 cache references. Another says the counter grows by one
  every cycle. The reference count is used here.
- **Feature order.** The figure of the source lists the features in a
  different order from its text. The text order is used here: distance,
  transition, xor, occurrence.
- **Transition weights.** The text gives 2^(n−m), while the figure puts 2^n
  on the entry right after `L`. The figure is followed. n = 7, and the window
  is 8 entries or until the next `L`.
- **Fixed point, learning rate, saturation and reset values** are not given
  in the source. They are chosen as described above.
- **Bit selections.** The xor feature uses the low 8 bits of the line and of
  the PC. The index-table hash and tag are also this design's choices.
- **Table replacement.** The source does not say how slots are chosen. Both
  tables use round-robin replacement.
- **Not included.** The cache itself, the L2/memory behind it and the
  processor are outside the design. The testbenches model a small cache.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and finishes on its
own. Each has a watchdog. The package must come first on the command line.
`-Wno-fatal` keeps verilator's width-extension lint warnings in the
testbenches from stopping the build:

```sh
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl \
    rtl/pp_pkg.sv tb/tb_perceptron_prefetcher.sv --top-module tb_perceptron_prefetcher
./obj_dir/Vtb_perceptron_prefetcher
```

| testbench | what it checks |
|-----------|----------------|
| `tb_ghb` | pushes, links, ring wrap, point and row reads against a reference array |
| `tb_index_table` | lookups and updates against a reference table |
| `tb_stride_prefetcher` | stride confirmation and suggestions on random streams |
| `tb_markov_prefetcher` | link walk, deduplication, at most DEGREE+2 cycles, with the real GHB and index table |
| `tb_feature_extractor` | all four features of four lanes against values computed from the miss list; exact latency |
| `tb_perceptron` | y and the accept decision per lane; training steps and saturation |
| `tb_cache_read_queue` | FIFO order, full and empty, back-pressure |
| `tb_accept_table` | use, overflow after exactly 256 references, overwrite training, random traffic against a model |
| `tb_deny_table` | wrong deny within 32 misses, timeout, overwrite, waiting for the training port, random traffic against a model |
| `tb_perceptron_prefetcher` | whole design at default parameters (Markov) |
| `tb_stride_workload` | whole design with the stride first level |

The two whole-design tests drive a direct-mapped 64-line cache model. The
stream has three phases:

1. a looping pattern that the first level predicts well;
2. a random phase where its guesses are useless, so the weights are trained
   down;
3. the loop again, so wrongly denied lines train the weights back up.

Each test checks that every prefetch issued is one the first level could have
suggested for a recent miss. It also checks that the event counters agree.
Finally, it checks that every mechanism happened at least once: engine stall,
full request queue, GHB wrap, used and expired accepts, right and wrong
denies, and training in both directions. The default-size test runs in well
under a minute.
