# Expected Hit Count (EHC) replacement on top of Hawkeye: RTL for an LLC tag directory

Hawkeye-style replacement policies learn from a small emulation of Belady's
optimal policy (MIN) which load instructions bring in blocks worth keeping
("cache-friendly") and which do not ("cache-averse"). On a miss they evict a
block last touched by an averse load. When every block in the set is
friendly, the learned indicator says nothing, and the policy falls back to
plain age (the block with the highest re-reference prediction value, RRPV).
That fallback is taken in a sizable share of replacements.

Expected Hit Count fills that gap with one extra 3-bit counter per cache
block, **Expected Further Hits (EFH)**: the number of hits the block is still
expected to receive in its current stay in the cache. A filled block starts
at 1, and every hit counts it down, stopping at 0. When no averse block is
present, the victim is the block with the smallest `EFH - RRPV`. That is a
block that is both old (high RRPV) and used up (low EFH). On a tie the
lowest way wins.

This repository holds synthesizable SystemVerilog for the whole replacement
side of such a last-level cache (LLC):

* the tag store, extended with RRPV and EFH;
* the victim selector;
* the Belady emulator (occupancy vectors and address cache) on sampled sets;
* the PC classifier;
* a top level that ties them together and processes one access per clock.

The default configuration is a 2 MB, 16-way LLC per core with 64-byte blocks
(2048 sets).

## What happens on one access

`ehc_llc` receives `(acc_addr_i, acc_pc_i)` with `acc_valid_i`. In the same
cycle it does the following:

1. It splits the address into offset (6 bits), set (11 bits) and tag
   (31 bits), and reads the set's row from `llc_tag_store`: 16 × {valid, tag,
   RRPV, EFH}.
2. It looks up the PC in `hawkeye_predictor`. The answer is *friendly* or
   *averse*.
3. If the set is a sampled set (index a multiple of 64), it feeds
   `(set, tag, PC signature)` to `optgen`. `optgen` may produce a training
   event for the predictor, which takes effect at the clock edge.
4. It computes the new row:

| event | block accessed / filled | other blocks of the set |
|---|---|---|
| hit, friendly load | RRPV ← 0, EFH ← max(EFH−1, 0) | unchanged |
| hit, averse load | RRPV ← 7, EFH ← max(EFH−1, 0) | unchanged |
| miss, friendly load | victim way gets tag, valid, RRPV ← 0, EFH ← 1 | valid blocks with RRPV < 6 get RRPV + 1 |
| miss, averse load | victim way gets tag, valid, RRPV ← 7, EFH ← 1 | unchanged |

5. It writes the row back at the rising edge. One cycle later it presents
   the response. The response gives:
   * hit or miss, and the way used;
   * how the victim was chosen: an empty way, an averse block, or the EHC
     rule;
   * whether a valid block was evicted, and that block's address;
   * the classification of the load;
   * the emulator's training event.

RRPV 7 is reserved for blocks last touched by an averse load. Aging stops
at 6, so a friendly block never looks averse. The victim selector
(`ehc_victim_select`) applies three rules in priority order:

1. the first invalid way;
2. else the first way with RRPV 7;
3. else the way with the lowest `EFH − RRPV`, computed as a signed 4-bit
   value from −7 to +7. The lowest index wins a tie.

Worked example of rule 3, for four ways:

| way | RRPV | EFH | EFH − RRPV |
|---|---|---|---|
| 0 | 6 | 1 | −5 |
| 1 | 6 | 0 | −6 |
| 2 | 2 | 0 | −2 |
| 3 | 5 | 0 | −5 |

Plain Hawkeye would evict the oldest block: way 0, the first with RRPV 6.
EHC evicts way 1. That block is just as old, but it has already had the hit
that was expected of it, while way 0 is still owed one.

## The Belady emulator (`optgen`)

This is the least obvious part of the design. Its job is to decide, for a
reuse of a block, whether Belady's MIN would have kept the block in the
cache between its previous access and this one. The decision only needs the
*past*: MIN would have kept the block if, at every moment of the reuse
interval, fewer than `WAYS` other blocks had to be held at the same time.

### Occupancy vector (`optgen_occupancy_vector`)

Each sampled set has a circular history of `LEN = 8 × WAYS = 128` slots.
Every access to the set takes the next slot. A slot holds the *occupancy*:
how many blocks MIN is holding at that moment, counting only intervals
already known to be kept.

Take an access to a block whose previous access was in slot `p`, with the
current slot `t`:

* It is an **OPT hit** if every slot `p, p+1, …, t−1` (modulo 128) has an
  occupancy below `WAYS`. All those slots are then incremented, because the
  block now occupies a way throughout.
* Otherwise it is an **OPT miss**, and the vector is left as it is.

In both cases slot `t` is cleared and the set's pointer advances. The range
test is `(i − p) mod LEN < (t − p) mod LEN` for each slot `i`. It is
evaluated for all 128 slots in parallel, together with the comparison
against `WAYS`.

Slot `p` itself is part of the interval. Its recorded occupancy is the one
after the previous access, and at that point the block is already resident.

### Address cache (`optgen_address_cache`)

The slots store no addresses. Each sampled set instead has a fully
associative address cache of 128 entries. An entry holds:

* the block tag;
* a 7-bit pointer to the slot of the block's last access;
* the 11-bit PC signature of the load that made that access.

A block is "in the window" if its entry is valid and its pointer is not the
slot being overwritten now. When the pointer advances onto slot `t`, any
entry pointing at `t` is dropped, because that access is now 128 accesses
old.

After this, at most 127 live entries remain. Each has a distinct slot among
the other 127. So with 128 entries a free entry always exists for a new
tag, and no live address is ever dropped. An assertion in the module checks
this.

### Training

When a reuse is found, `optgen` emits `train_valid_o` with the signature
stored in the entry: the load that made the *previous* access. The outcome
is friendly if the reuse was an OPT hit and averse if it was an OPT miss.
A first access, or one older than the window, trains nothing.

Only one set in 64 is sampled (32 sets at the default size). This works
because a load tends to behave the same way in every set.

## PC classifier (`hawkeye_predictor`)

The classifier is a table of 2048 three-bit saturating counters. It is
indexed by the PC XOR-folded to 11 bits. The same 11-bit value is the
signature kept in the address cache.

* A counter with its top bit set means friendly.
* A training event increments the counter on an OPT hit and decrements it
  on an OPT miss.
* All counters reset to 4 (weakly friendly).
* A lookup in the same cycle as a training write sees the old value.

## Sizes and storage

| structure | default geometry | bits |
|---|---|---|
| EFH counters (the EHC addition) | 2048 × 16 × 3 | 98 304 (12 KB) |
| RRPV | 2048 × 16 × 3 | 98 304 (12 KB) |
| tags + valid | 2048 × 16 × 32 | 1 048 576 |
| occupancy vectors | 32 × 128 × 5 | 20 480 (2.5 KB) |
| address caches | 32 × 128 × (1 + 31 + 7 + 11) | 204 800 (25 KB) |
| PC classifier | 2048 × 3 | 6 144 |

The EHC addition is exactly 12 KB per 2 MB of cache. The address caches are
larger than a production design would make them, because they keep full
31-bit tags. A hashed partial tag would shrink them at the cost of rare
false matches.

A four-core system with an 8 MB shared LLC needs `SETS = 8192`. Nothing
else changes, and 128 sets are then sampled.

## Interface and timing of `ehc_llc`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset (clears valid bits, emulator history, classifier) |
| `acc_valid_i` | in | 1 | an access this cycle; one per cycle, no back-pressure |
| `acc_addr_i` | in | `ADDR_W` (48) | physical byte address |
| `acc_pc_i` | in | `PCW` (64) | PC of the load |
| `rsp_valid_o` | out | 1 | response for the access of the previous cycle |
| `rsp_hit_o`, `rsp_way_o` | out | 1, 4 | hit, and the hit or filled way |
| `rsp_kind_o` | out | 2 | on a miss: `SEL_INVALID`, `SEL_AVERSE` or `SEL_EHC` |
| `rsp_evict_valid_o`, `rsp_evict_addr_o` | out | 1, 48 | a valid block was replaced, and its block address |
| `rsp_friendly_o` | out | 1 | classification used for this access |
| `rsp_sampled_o`, `rsp_train_valid_o`, `rsp_train_friendly_o` | out | 1 | emulator activity |

The lookup, the decision and the row write all happen in the cycle of the
access. The response is registered. Back-to-back accesses to the same set
are handled, because the tag store is written at the edge and read
combinationally. The module decides placement and replacement only. No
data array and no fill latency are modelled. A fill is taken as complete in
the cycle of its miss.

## What comes from the source design and what does not

These parts follow the published description:

* Hawkeye with a 3-bit RRPV, set from the load's classification;
* the 3-bit EFH count-down counter, loaded with 1 and decremented on each
  access;
* the `EFH − RRPV` rule with first-way tie-break;
* the Belady test on occupancy vectors with an address cache holding
  last-occurrence pointers;
* a history of eight times the associativity;
* one sampled set in 64;
* the 2 MB 16-way geometry.

These are this implementation's own choices:

* the 64-byte block, 48-bit address and 64-bit PC;
* the counter table, hash and reset value of the classifier;
* aging other friendly blocks only on a friendly fill, capped at 6;
* counting the previous access's slot in the interval;
* the address-cache size and full tags;
* training only on reuses;
* evicting the lowest-numbered averse block;
* the single-cycle timing.

The source also motivates a per-memory-region (128 KB) estimate of the
expected hit count. Its evaluated configuration, however, uses the constant
one, and its stated overhead covers only the 3-bit counters. This RTL
follows that configuration and has no region table.

The baseline Hawkeye refinements not described by the source are not
included: detraining on eviction, bypass, and per-core signatures.

## Files

* `rtl/ehc_pkg.sv`: shared constants (geometry, widths), `repl_state_t` and
  `victim_kind_e`.
* `rtl/ehc_victim_select.sv`, `rtl/llc_tag_store.sv`,
  `rtl/hawkeye_predictor.sv`, `rtl/optgen_occupancy_vector.sv`,
  `rtl/optgen_address_cache.sv`, `rtl/optgen.sv`: the blocks described
  above.
* `rtl/ehc_llc.sv`: the top level.
* `tb/tb_<module>.sv`: one self-checking testbench per module. Each prints
  `TB_RESULT checks=N failures=M` and has a watchdog.
* `tb/ehc_ref.svh`: a transaction-level reference model of the whole
  policy, written independently of the RTL's structure. The emulator there
  keeps a plain list of the last 127 accesses and searches it backwards.
* `tb/ehc_llc_check.svh`: stimulus and checking shared by the two top-level
  testbenches. It uses three load streams:
  * a loop that fits in the ways (friendly);
  * a medium working set;
  * a thrashing sweep (trained averse).

  They are spread over sampled and unsampled sets. Every response is
  compared with the model. Each mechanism is counted, and a run in which one
  never occurs fails:
  * hits and misses;
  * empty fills;
  * averse evictions and EHC evictions;
  * EHC choices that differ from "oldest";
  * hits with EFH already 0;
  * aging;
  * OPT hits and OPT misses;
  * averse loads.
* `tb/tb_ehc_llc.sv` runs the top at a reduced size (256 sets, 8 ways,
  64-slot history). `tb/tb_ehc_llc_full.sv` runs it at the default size
  with no parameter overridden: 20 000 accesses, a few seconds.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_ehc_llc_full \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/ehc_pkg.sv tb/tb_ehc_llc_full.sv
./obj_dir/Vtb_ehc_llc_full
```

Replace the top module name to run another testbench. The simulator has
two states. Anything a testbench reads is reset or initialised first.

## Changing it

All sizes are parameters of `ehc_llc` with the defaults above. The emulator
sizes follow from them:

* `SETS` and `WAYS` set the geometry;
* `SAMPLE_EVERY` sets how many sets are sampled;
* `HIST_LEN` should stay a power of two; keep it at 8 × `WAYS` to match the
  source;
* `PRED_N` (a power of two) sizes the classifier;
* `EFH_START` sets the expected hit count given to a new block.

`SETS`, `HIST_LEN` and `PRED_N` must be powers of two, and `SETS` must be a
multiple of `SAMPLE_EVERY`.
