# EXMA: an exact-match accelerator for FM-Index backward search

Read aligners begin by finding where short pieces of a read occur exactly in a
reference genome. An FM-Index does this with *backward search*. Each step keeps
a range of suffix-array rows `[low, high)` and updates both ends with

    pointer' = Count(c) + Occ(c, pointer)

`Occ(c, p)` counts how often symbol `c` appears in the first `p` rows of the
Burrows-Wheeler transform. Each step is one random DRAM access, and that access
is the whole cost of the search.

EXMA makes each step cover k symbols at once (k = 15 here). For every k-mer,
the table stores its *increments*: the sorted list of rows at which
`Occ(k-mer, ·)` goes up by one. Then:

* `Occ(k-mer, pos)` is the number of increments that are `<= pos`.
* `Count(k-mer)` is the total number of increments of all smaller k-mers.

A full increment table would not fit in memory. EXMA keeps it small in three
ways:

1. **CHAIN compression.** Consecutive increments are stored as differences.
2. **A learned index (MTL).** A small neural network predicts where the answer
   lies in the increment list, so a lookup reads one DRAM line instead of
   doing a binary search.
3. **Request scheduling.** A queue reorders requests so that requests for the
   same k-mer share cached data and an open DRAM row.

This RTL implements the accelerator that answers single requests
`[tag, k-mer, pos] -> Count(k-mer) + Occ(k-mer, pos)`. The host runs the
backward-search loop and issues two such requests per step, one for `low` and
one for `high`.

## Block diagram

```
 host req ─► sched_queue (512-row CAM) ──stage 1: smallest k-mer──►┐
               ▲   │ CAM "same k-mer still queued?"                 │
               │   └──────────────────────────────┐                 ▼
               │                          occ_engine: base FSM ── base cache (1 MB, 8-way)
               │ stage 2: smallest pos            │                 │ miss
               └──────────────────────────► occ_engine: Occ FSM     │
                                            │ index cache (32 KB, 16-way)
                                            │ infer_engine (10 PEs + sigmoid)
                                            │ chain_decompress (1 adder)
 host rsp ◄──────────────────────────────── linear search
 table write ─► chain_compress (27 subtractors) ─┐
                                                  ▼
             dma_ctrl (4 clients, round robin) ─► page_mgr (open-row registers,
                                                   dynamic policy) ─► DRAM port
```

Each file in `rtl/` holds one module:

| file | role |
|---|---|
| `exma_pkg.sv` | widths, data formats, structs, statistics counters, k-mer index function |
| `exma_top.sv` | top: wires everything together and adds the table-write path |
| `sched_queue.sv` | scheduling queue with 2-stage selection and CAM search |
| `occ_engine.sv` | per-request control: base lookup, MTL walk, line read, linear search |
| `exma_cache.sv` | set-associative line cache, used as both base cache and index cache |
| `infer_engine.sv` | evaluates one MTL node |
| `exma_pe.sv` | 8-bit MAC processing element with a 32-byte register file |
| `sigmoid_unit.sv` | piecewise-linear sigmoid |
| `chain_compress.sv`, `chain_decompress.sv` | CHAIN line codec |
| `dma_ctrl.sv` | DRAM request arbiter and response router |
| `page_mgr.sv` | dynamic page policy and DRAM latency model |

## Data in DRAM

A DRAM line is 64 bytes (`LINE_W = 512`). Line addresses are 33 bits. There are
three regions:

| region | first line | contents |
|---|---|---|
| base table | `0x0000_0000` | 4 base entries per line, indexed by the dense k-mer index |
| MTL index | `0x1000_0000` | one model node per line |
| increments | `0x2000_0000` | CHAIN lines |

**K-mer encoding.** On the request port, each symbol takes 3 bits:
`$`=0, A=1, C=2, G=3, T=4, with the first symbol in the top bits. A 15-mer is
therefore 45 bits. Because numeric order matches lexicographic order, the
scheduler can sort k-mers as plain numbers. To address the base table, each
symbol becomes 2 bits (`$` is folded onto A), giving a 30-bit dense index
(`kmer_index()`).

**Base entry** (128 bits):

| field | width | meaning |
|---|---|---|
| `root` | 24 | MTL node number of the model for this k-mer |
| `line` | 40 | first CHAIN line of the increment list |
| `f` | 24 | number of increments of this k-mer |
| `count` | 40 | `Count(k-mer)` |

The paper ends every increment list with a MAX terminator. Here `f` is stored
in the base entry instead, so lists need no terminator.

**CHAIN line.** One line holds up to 28 increments:

| bits | contents |
|---|---|
| `[39:0]` | first increment, absolute |
| `[63:40]` | its index in the k-mer's list |
| `[68:64]` | number of differences, 0..27 |
| from bit 69 | 27 differences of 16 bits each |

Every line starts with an absolute value, so it can be decoded on its own. If a
difference does not fit in 16 bits, the compressor ends the line there and
reports how many increments it took (`n_used`). The writer then starts the
next line with the remaining increments.

## The two-stage schedule

Requests enter a 512-row queue. Each row is in one of these states:

* FREE
* NEW: waiting for its base entry
* S1: base lookup in progress
* READY: base entry known
* S2: Occ computation in progress

Two comparator trees run every cycle:

* **Stage 1** picks the NEW row with the smallest k-mer. Requests for the same
  k-mer therefore reach the base cache back to back, and the first one's miss
  serves the rest. The base entry is stored next to the row.
* **Stage 2** picks the READY row with the smallest `pos`. Consecutive Occ
  lookups then walk the increment region roughly in address order, which helps
  both the index cache and DRAM rows.

Each stage serves one request at a time, and the two stages overlap. Results
leave in stage-2 order, and the host matches them to requests by tag.

The queue is also a CAM. Given a k-mer, it reports whether any other occupied
row holds the same k-mer. The dynamic page policy uses this answer.

## Predicting where the answer is (MTL index)

The increment list of one k-mer can hold millions of entries. A binary search
over it would need about log2(f) dependent DRAM reads. Instead, a small model
tree estimates `F ≈ Occ(k-mer, pos) / f`, where `F` is a fraction held as 8
bits. The predicted list position is `p = F·f`.

**Non-leaf nodes** are fully connected layers of 10 sigmoid neurons. They have
two 8-bit inputs:

* `x0`: `pos` shifted right by `pshift`, saturated to 8 bits
* `x1`: 8 bits of the dense k-mer index, starting at bit `kshift`

Each hidden neuron computes `acc = w0·x0 + w1·x1 + 16·b`. It outputs
`h = sigmoid(acc / 16)`, with `h` in units of 1/256. The output is
`F = Σ v·h / 16 + 16·c`, saturated to 0..255. The next node is
`child0 + (F·nchild >> 8)`.

**A leaf** is a linear regression: `F = (w·x0 + 16·b) / 4`, saturated.

Weights and biases are signed 8-bit. A node line has this layout:

| byte(s) | contents |
|---|---|
| 0, bit 0 | leaf flag |
| 1 | `pshift` |
| 2 | `kshift` |
| 3 | `nchild` |
| 4..6 | `child0` |
| 8..17, 18..27, 28..37, 38..47 | non-leaf `w0`, `w1`, `b`, `v` |
| 48 | non-leaf `c` |
| 8, 9 | leaf `w`, `b` |

`infer_engine` loads the weights into ten PEs (`exma_pe`, one per neuron). It
runs two MAC steps and a bias step, applies ten sigmoid units, then sums the
outputs in one cycle. A non-leaf node takes 11 cycles from `start` to `done`; a
leaf takes 6. Nodes come through the index cache. The walk starts at the
base entry's `root` and continues until a leaf is reached.

**From `p` to a line.** The predicted line is `base.line + p / 28`. Lines are
assumed full when predicting, and the result is clamped to the last line that
must exist, `(f-1)/28`. The line is read and decompressed one increment per
cycle.

**Linear search.** If the line brackets `pos` (it contains the first increment
`> pos`, or it is the last line and every increment is `<= pos`), the answer is
`count` plus the list index of the first increment `> pos`. Otherwise the
engine steps one line forward, if all increments were `<= pos`, or one line
back, if the first was already `> pos`. It keeps stepping in that direction
only, so the search cannot oscillate. The prediction is judged only by how many
extra lines it costs; a wrong model costs time, never a wrong result. A k-mer
with `f = 0` is answered from its base entry alone.

## The dynamic page policy

DRAM is modelled as 192 banks: 4 channels × 3 DIMMs × 4 ranks × 2 bank groups
× 2 banks. Each row is 2 KB, or 32 lines. A row with number `r` lives in bank
`r % 192`, row `r / 192`.

`page_mgr` keeps one open-row register per bank and an "all rows closed" flag.
For each access it decides among three cases:

| case | commands | latency |
|---|---|---|
| row hit | CAS | tCAS |
| bank closed | ACT + CAS | tRCD + tCAS |
| other row open | PRE + ACT + CAS | tRP + tRCD + tCAS |

The timings are 16-16-16 (DDR4-2400). After the access, the row stays open only
if the request carries a *keep-open* hint. Otherwise the bank is precharged
(`dram_close`).

The occ engine sets the hint on an increment-line read when the queue's CAM
reports that another queued request has the same k-mer. That request will
probably read the same or a neighbouring line soon. Base and index fills and
table writes never keep rows open.

The decision and the latency travel with the request on the DRAM port
(`dram_pre`, `dram_act`, `dram_close`, `dram_cycles`). An external DRAM model
or controller can then apply them.

## Building the table

The table-write port (`wr_*`) accepts a line address, up to 28 sorted
increments and the list index of the first one. `chain_compress` computes all
27 differences in parallel, packs the line and writes it through DMA client 3.
`wr_done` then reports how many increments went into the line. Base entries and
model nodes are plain lines, written by the host directly into DRAM. Training
the model is offline software and is not part of this RTL.

## Where this design departs from the paper

* **Scheduling-queue depth.** The paper gives two sizes: its design-overhead
  text gives 512 entries and its configuration table gives 256. 512 is used.
* **Inference engine.** The paper reuses an existing neural accelerator: 4
  arrays of 8×8 PEs with a 16 KB buffer each, whose dataflow it does not
  describe. Here one PE per neuron (10 PEs) evaluates a node, and there is no
  shared buffer. The paper's arrays share one activation unit each; here
  each neuron has its own sigmoid unit so a layer activates in one cycle.
  PE-array count is not a parameter.
* **Bases are not compressed.** The paper applies the same CHAIN coding to
  base entries. Here bases stay plain so that one can be found at a fixed
  address from the k-mer. Base entries are 16 bytes, not the 4 bytes the
  paper's figure shows, because they also carry `f`, the root node and a
  40-bit line pointer.
* **Occ definition.** The paper's worked example counts increments smaller
  than `pos`, while its search description looks for the first increment
  larger than `pos`. This design counts increments `<= pos`. The two readings
  differ only when an increment equals `pos`.
* **Reading `p` and `p+1`.** The paper reads entries `p` and `p+1` to verify a
  prediction. Here the whole line expected to hold `p` is read, and the linear
  search moves by whole lines.
* **Number formats.** Node format, fixed-point scaling, line layouts, address
  map, cache replacement (round robin) and all handshakes are this design's
  own. The paper does not give them.
* **Page manager location.** The paper places the page manager in the host
  memory controller; here it sits inside the accelerator top. DRAM timing
  covers only tRCD, tCAS and tRP: no refresh, tRAS, tFAW or bus turnaround.
* **Caches.** The base cache is eDRAM in the paper; here it is a plain
  memory array.
* **No padding.** The `$` padding of short k-mers at the end of a read is not
  modelled: `$` and A share a base entry.
* **Limits on size.** Positions are 40 bits, enough for genomes above 31 G
  bases. Per-k-mer counts `f` are 24 bits, so one k-mer can have at most about
  16.7 M increments.

## Simulating

Each block has a self-checking testbench in `tb/`. Every testbench prints
`TB_RESULT checks=N failures=M` and stops itself after a fixed number of
cycles. For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    --top-module tb_exma_top rtl/exma_pkg.sv rtl/*.sv tb/tb_exma_top.sv
./obj_dir/Vtb_exma_top
```

`tb_exma_top` runs the top at its default sizes, including the 512-row queue
and the 1 MB base cache. It takes a few seconds. Its setup is:

* 10 k-mers over 3000 rows: one k-mer owns about 40% of the rows and one has
  no increments; four more k-mers are absent.
* The increment table is written through the compressor.
* A behavioural DRAM model serves base lines, six model nodes and the stored
  increment lines. It honours `dram_cycles` and sometimes drops `dram_ready`.
* 900 random requests in pairs that share a k-mer, like the low and high
  requests of one search step.

It checks every result against a direct count. It also counts a failure for any
mechanism that never occurs:

* base-cache and index-cache hits and misses
* correct first-line predictions
* linear-search steps
* empty k-mers
* keep-open hints
* row hits, activates and precharges
* a full queue
* out-of-order completion

The unit testbenches are:

* `tb_sched_queue`: runs with a 16-row queue and checks the sort order and
  the CAM.
* `tb_base_cache` and `tb_index_cache`: check hits, misses and replacement.
* `tb_chain_compress` and `tb_chain_decompress`.
* `tb_exma_pe` and `tb_sigmoid_unit`: the sigmoid is checked against the exact
  function within 0.02.
* `tb_infer_engine`: checks node results and the 11- and 6-cycle latencies
  against a reference model.
* `tb_page_mgr`: checks the decisions and latencies.
* `tb_dma_ctrl`: checks arbitration and routing.

Pass `+verilator+rand+reset+2` to start undriven state at random values. The
design resets everything it reads.
