# Usage- and miss-based data prefetcher (UMBP) in SystemVerilog

A stream/stride data prefetcher that decides *how much* to prefetch for each
load instruction from two measurements of that instruction:

* **usage** – is it one of the most frequently executed loads the prefetcher
  currently tracks ("common") or not ("uncommon")?
* **miss rate** – does it miss the L2 cache less or more often than a
  reference set of other tracked loads?

The two answers select one of three prefetch degrees:

|              | low miss rate | high miss rate |
|--------------|---------------|----------------|
| **common**   | standard (4)  | high (8)       |
| **uncommon** | low (1)       | standard (4)   |

So frequent loads that keep missing prefetch the most lines, and rare loads
that already hit prefetch only a single line. What is prefetched (which lines)
comes from a per-instruction pattern detector that recognises a stream, a
stride, or a stream interrupted by strided jumps.

The algorithm, the table sizes (128 tracked instructions, 50 common, a 70-entry
reference set of 50 common + 20 random uncommon instructions) and the degrees
1/4/8 come from the published description of the prefetcher, which was
evaluated as C code in the DPC-2 trace simulator. The description leaves the
hardware organisation, the detection rules, the timing and several encodings
open; everything in that category is a choice of this RTL and is listed in
"Departures and open points" below.

## Block diagram

```
            acc_valid/ready, acc_ip, acc_addr, acc_hit
                              |
                     +--------v---------+
                     |  control FSM     |  (umbp_prefetcher)
                     +--+---+---+---+---+
        lookup/update   |   |   |   |  start issue
   +--------------------v+  |   |  +v-----------------+
   | ip_table (128 x 203b)|  |   |  | prefetch_issue   |--> pf_valid/ready, pf_addr
   | CAM, 6-bit ages      |  |   |  +------------------+
   +--+--------+----------+  |   |            ^ lines
      |        | all_calls   |   |  +---------+--------+
      |  +-----v--------+    |   |  | degree_select    |
      |  | usage_ranker |----+   |  | (2x2 matrix)     |
      |  +-----+--------+        |  +---------^--------+
      |        | common          |            | low_miss
      |  +-----v---------------+ |  +---------+--------+
      +->| sample_table (70x64b|-+->| miss_classifier  |
  scan   | 50 common+20 random)|    | (1 entry/cycle)  |
         +---------------------+    +------------------+
   pattern_detector sits on the table's read/write path.
```

## Per-instruction state (`ip_table`)

Each of the 128 entries holds, exactly as in the original description:

| field        | bits | use |
|--------------|------|-----|
| `ip`         | 64   | tag, searched associatively (CAM) |
| `last_line`  | 58   | last data line touched (64-byte lines) |
| `stride`     | 6    | last non-unit line delta, signed |
| `stream_cnt` | 5    | length of the current run of +1 steps, saturating |
| `misses`     | 32   | L2 misses of this instruction |
| `calls`      | 32   | times this instruction was seen |
| `age`        | 6    | replacement value |

plus a valid bit. Six bits cannot rank 128 entries, so the "LRU value" is a
saturating age: a written entry gets age 0, all other valid entries age by
one (stopping at 63), and a new instruction replaces the first invalid entry
or else the oldest one (lowest index on ties). Several entries therefore share
age 63 once the table is full; replacement is LRU-like, not exact LRU.

The two counters saturate. The published totals for this storage (21924 bytes
for the table, 2^15 bits with the reference set) do not match the listed field
widths (128 x 203 bits = 3248 bytes; plus 70 x 64 bits = 30464 bits); the RTL
follows the field widths.

## Pattern detection (`pattern_detector`)

The line delta `d = new_line - last_line` of an instruction drives a small rule
set (these rules are this design's reading of "a stream, a stride, or a stream
followed by a stride"):

* `d = +1`: a stream step. `stream_cnt` increments; the stored stride stays.
  The access is **STREAM** if no stride is stored, **STREAM_STRIDE** if one is
  (a run of consecutive lines inside a strided walk).
* `d` another value in -32..31 (not 0): the stride becomes `d`, the stream
  count clears. The access is **STRIDE** if `d` equals the stride stored
  before, i.e. the same stride seen twice in a row (unit steps in between do
  not break this).
* `d = 0` or out of range: stride and count clear, no pattern.

The first access of a newly allocated instruction has no pattern. An access
without a pattern prefetches nothing.

Prefetch addresses for degree *n*, with A the current line and S the stride:
STREAM `A+1 … A+n`; STRIDE `A+S … A+nS`; STREAM_STRIDE `A+1, A+1+S, …,
A+1+(n-1)S` (one more line of the run, then strided). Addresses are not held
inside a 4 KB page.

## Usage metric (`usage_ranker`)

An instruction is common if fewer than 50 valid entries rank above it by call
count, ties going to the lower table index. Rather than sorting the table, one
comparator per entry (128 comparators of 32 bits and a population count) ranks
the single entry in question. With a full table this splits 50 common / 78
uncommon, as intended; a new instruction starts with one call and so is
uncommon until it has been used often enough. While fewer than 51 entries are
valid, all of them are common.

## Miss metric: the reference set (`sample_table`, `miss_classifier`)

This is the least obvious part. Comparing an instruction's miss rate with
*all* tracked instructions would be dominated by new entries whose rate is 0 %
or 100 % after one access, so the comparison uses a 70-entry reference set:
the 50 common instructions plus 20 randomly drawn uncommon ones.

**Refill.** The reference set holds *snapshots* of (misses, calls), 64 bits
per entry, rebuilt every `REFRESH_PERIOD` (128) accesses. A refill scans the
instruction table one entry per cycle (128 cycles); the usage ranker is
shared with the access path and ranks the scanned entry. Common entries fill
slots 0–49 in scan order. Uncommon entries compete for slots 50–69 by
reservoir sampling: the *k*-th uncommon entry takes slot *k* while *k* < 20,
and afterwards replaces slot `(lfsr * (k+1)) >> 16` if that value is below 20,
`lfsr` being a 16-bit maximal-length LFSR (x^16+x^14+x^13+x^11+1) that steps
every cycle. Each uncommon entry thus ends up in the set with roughly equal
probability without a divider. Until the first refill the set is empty.

**Comparison.** For an access, the classifier reads the 70 slots one per
cycle and counts the valid ones and the "worse" ones, whose miss rate is
strictly higher; rates are compared by cross-multiplication
(`m_j * c_q > m_q * c_j`), so no division is needed. The instruction has a
**low** miss rate when `100 * worse >= THRESH_PCT * valid`. With 50 % this is
the original rule ("it is doing well if its miss rate is below that of half
the others"); `THRESH_PCT = 30` was chosen inside the 25–40 % range reported
as best. An empty reference set counts as low. The verdict is ready 71 cycles
after the comparison starts.

## Control and timing (`umbp_prefetcher`)

The top takes one access at a time (`acc_valid`/`acc_ready`; `acc_hit` is the
L2 hit bit) and walks through

| state  | cycles | work |
|--------|--------|------|
| UPDATE | 1  | CAM lookup, allocation/replacement, pattern detection, counter update, table write |
| RANK   | 1  | usage rank of the updated entry; start of the miss comparison |
| MISS   | 71 | miss comparison; the degree is known at its end |
| ISSUE  | *n* | one prefetch address per cycle while `pf_ready` is high |
| REFILL | 129 | every 128th access only |

An access therefore takes about 75 + *n* cycles when the prefetch port never
stalls (83 on average in the end-to-end test). `acc_ready` is high only in the
idle state. `pf_addr` is a line-aligned byte address with a valid/ready
handshake; an assertion checks it stays stable while stalled. One cycle-wide
`dec_*` report per access (pattern, degree, common, low miss, table hit,
eviction) is provided for performance counters; `refill_active` is high
during a refill.

All sizes are parameters of the top with the published values as defaults:
`ENTRIES=128`, `NUM_COMMON=50`, `N_RANDOM=20`, `DEG_LOW=1`, `DEG_STD=4`,
`DEG_HIGH=8`; `THRESH_PCT=30` and `REFRESH_PERIOD=128` are this design's
values. Field widths live in `rtl/umbp_pkg.sv`.

## Departures and open points

* The original is a software model inside a trace simulator, which calls the
  prefetcher at no cost. This RTL is sequential and needs ~80 cycles per
  access; whether that keeps up with a real L2 access rate is not known. A
  pipelined or wider miss comparison would be the place to spend area.
* Everything in the pattern rules, the reference-set refill (period, scan,
  reservoir sampling), the threshold value, the tie-breaks, reset behaviour,
  the saturating counters and the interfaces is this design's choice.
* One source of the description calls the counters "misses and cycles", a
  diagram labels them "Hits" and "Calls"; the usage metric needs a reference
  count, so they are misses and calls here.
* The degree order is low 1, standard 4, high 8; one summary sentence of the
  original lists "high, standard, low" as "1, 4, 8", which contradicts the rest
  of the text and was not followed.
* The processor, caches and memory around the prefetcher are not part of this
  RTL.

## Verification

Each block has a self-checking testbench in `tb/` that compares against values
computed independently (sorting for the rank, real-valued miss rates, a model
of the replacement rule, explicit address sequences) and checks the
latencies given above. `tb_umbp_prefetcher` runs the whole prefetcher at its
default sizes against a model of the table, the patterns and the usage rank:
about 2,600 accesses from 40 hot loads (streams, strides, runs with jumps,
miss probabilities 0–90 %), 80 cold loads and 300 new loads that force
replacement, with random backpressure on the prefetch port. It requires every
mechanism (the three patterns, the three degrees, common/uncommon, low/high
miss, replacement, refill, access stall, prefetch backpressure) to occur. The
miss verdict itself is only checked exactly while the reference set is empty,
because the random draw is not modelled in the testbench.

## Simulating

With Verilator 5 (package first, then the modules and one testbench):

```
verilator --binary --timing --assert --top-module tb_umbp_prefetcher \
  rtl/umbp_pkg.sv rtl/ip_table.sv rtl/pattern_detector.sv rtl/usage_ranker.sv \
  rtl/sample_table.sv rtl/miss_classifier.sv rtl/degree_select.sv \
  rtl/prefetch_issue.sv rtl/umbp_prefetcher.sv tb/tb_umbp_prefetcher.sv -o sim
./obj_dir/sim
```

Each testbench ends with a line `TB_RESULT checks=N failures=M`. The
end-to-end test runs in a few seconds. Unit testbenches are run the same way
with their own block file (and `rtl/umbp_pkg.sv`).

## Files

| file | contents |
|------|----------|
| `rtl/umbp_pkg.sv` | widths, entry struct, pattern and degree enums |
| `rtl/ip_table.sv` | instruction table, CAM lookup, replacement |
| `rtl/pattern_detector.sv` | stream / stride / stream-then-stride rules |
| `rtl/usage_ranker.sv` | common/uncommon rank |
| `rtl/sample_table.sv` | 70-entry reference set and its refill |
| `rtl/miss_classifier.sv` | miss-rate comparison with threshold |
| `rtl/degree_select.sv` | usage/miss matrix to 1/4/8 lines |
| `rtl/prefetch_issue.sv` | prefetch address generator |
| `rtl/umbp_prefetcher.sv` | top level and control FSM |
| `tb/tb_*.sv` | one self-checking testbench per block, `tb_umbp_prefetcher` end to end |
