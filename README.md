# Enthuse: streaming group-by and sliding-window aggregation in SystemVerilog

Aggregation asks, for every group in a stream, for a summary of the group's keys:
its minimum, maximum, sum, count, number of distinct keys, average, or its minimum,
median and maximum. This design computes such aggregates in hardware at a fixed
rate of P tuples per clock cycle (P = 4 by default). It has two engines that share
most of their logic:

* **Group-by engine.** The input is a stream of `(group, key)` tuples already
  sorted by group. The engine returns one `(group, result)` tuple per group and
  never stalls.
* **Sliding-window engine.** The input is an unsorted stream. Every `wa` tuples it
  takes the last `ws` tuples as a window and aggregates the whole window, per group
  or over all tuples. Each window is sorted, and every tuple gets its group's size
  in the window attached. Because nothing is updated incrementally, no inverse
  operator is needed. Selection results such as the median therefore cost the same
  as a sum.

The main idea is that aggregating a sorted stream is a *segmented prefix scan*. The
scan is cut wherever the group changes, and at the last tuple of each group its
running value is the group's result. A parallel prefix scan over P tuples per cycle
produces these values. A carry register lets groups run on from one batch to the
next. A permutation network then packs the sparse results onto consecutive output
ports. For sliding windows, a sorter counts group sizes while it sorts. With those
sizes, position-based results (first, median, last) fall out of the same scan.

## Data types and operators

All shared types are in `rtl/enthuse_pkg.sv`:

| type       | fields                                      | use |
|------------|---------------------------------------------|-----|
| `tuple_t`  | `group` (32 bit), `key` (32 bit)            | input tuples, ordered by `{group, key}` |
| `ctuple_t` | `group`, `key`, `card` (16 bit)             | sorted tuples with their group size in the window |
| `res_t`    | `group`, `result` (32 bit)                  | output tuples |

`fn` (type `fn_e`) picks the operator at run time:

| code | name          | result per group |
|------|---------------|------------------|
| 0    | `FN_MIN`      | smallest key (unsigned) |
| 1    | `FN_MAX`      | largest key (unsigned) |
| 2    | `FN_SUM`      | sum of keys, modulo 2^32 |
| 3    | `FN_COUNT`    | number of tuples |
| 4    | `FN_DCOUNT`   | number of distinct keys (needs the stream sorted by key within the group) |
| 5    | `FN_AVG`      | sum / count, rounded down |
| 6    | `FN_MINMEDMAX`| sliding-window engine only: up to three tuples per group, holding the keys at sorted positions 1, card/2+1 and card |

Inputs and outputs move in **batches** of P tuples. An input batch is always full.
An output batch has a valid bit per port (`out_vld`). Output ports fill in
round-robin order, continuing from batch to batch. Reading the valid ports
starting at port 0, and wrapping around, gives the results in order. Within a
group-by stream or a window, groups come out in ascending order.

## The group-by pipeline (`enthuse_groupby`)

```
in_data ──► mark_last ──► agg_scan ──────────────► reverse_butterfly ──► out_res/out_vld
           (hold+mark)    (log2P scan stages + n')   (log2P switch stages)
```

### Marking the last tuple of each group (`mark_last`)

Only the last tuple of a group will carry a result. Within a batch, tuple `i` is
last when tuple `i+1` has another group. Tuple P-1 can only be judged against the
first tuple of the next batch. So the stage holds one batch and releases it when
the next batch arrives. It also releases the batch when the batch itself is
flagged `in_end`, which closes the stream. The flag lets the final group finish
without a dummy batch behind it.

### The segmented scan (`agg_scan`)

This is the heart of the design. Every tuple starts as a small partial state:

* its group and key;
* the smallest key of the range (`dmin`);
* the aggregate value (`acc`);
* the tuple count;
* the distinct-key count;
* the count of last-of-group flags.

log2(P) registered stages follow a Kogge-Stone pattern. In stage `s`, position
`i` combines its state with the state of position `i - 2^s`. After the last stage,
each position holds the combination of everything from the batch start up to
itself.

The combination is **segmented**. Two states are merged only when they belong to
the same group; otherwise the right-hand one is kept unchanged. The input is
sorted, so two ranges that end in the same group are each contiguous within it.
A single comparison of group IDs is therefore enough; no segment-start flags need
to travel through the scan.

* Sum, count, min and max combine in the obvious way. `acc` holds the sum or the
  min or max, depending on `fn`.
* **Distinct count** combines two ranges of the same group by adding their
  distinct counts, then subtracting one if the left range's largest key equals
  the right range's smallest key. The left range's largest key is simply its
  last key, since keys are sorted. This only holds when the keys are sorted
  inside each group.
* The **count of last flags** runs unsegmented over the whole batch. For a marked
  tuple it is that tuple's rank among the marked tuples of the batch, which
  becomes its output index.

One extra registered stage, **n'**, follows the scan. It joins batches together:

* A carry register holds the state of the group that was still open at the end
  of the previous batch. Its count is a full 32 bits, while counts inside the
  scan need only log2(P)+1 bits.
* Every tuple at the start of the new batch that belongs to the same group
  absorbs the carry. Because the scan is inclusive, only the leading run of the
  carried group is affected.
* The carry is replaced whenever a batch does not end on a group boundary. It is
  dropped at the end of a stream or window.

n' also picks the result for `fn` (the average is a 32-bit divide) and forms each
tuple's **destination port**: a rolling offset plus the tuple's rank among the
marked tuples, modulo P. The offset counts all results so far, modulo P, so
result k of the stream goes to port k mod P.

### Compaction (`reverse_butterfly`)

The marked tuples are scattered over the ports; they must be packed. The reverse
butterfly has log2(P) stages of 2×2 switches. Stage `s` exchanges tuples between
ports whose numbers differ only in bit `s`, starting with the lowest bit. A tuple
is moved so that bit `s` of its port matches bit `s` of its destination.

The network does not block for this traffic pattern: valid tuples keep their
input order and their destinations are consecutive numbers modulo P. Two tuples
that meet at a switch differ in the destination bit that switch decides, so they
never compete for the same output. An assertion in each stage checks this.

**Timing.** The group-by pipeline accepts a batch every cycle and never asserts
backpressure. Latency:

* 1 cycle in the marking stage;
* log2(P) + 1 cycles in the scan;
* log2(P) cycles in the butterfly;
* 2·log2(P) + 2 cycles in total (6 for P = 4), measured from the cycle after a
  batch is accepted to its results.

On top of this comes the wait for the next batch, which marking needs. A design
that folded n' into the last scan stage would save one cycle.

## The sliding-window pipeline (`enthuse_swag`)

```
in ─► window_buffer ─► sorter_card ─► mark_last ─► agg_scan ─► prra ─► out
      (2·WS_MAX ring)  (sort + group     (same blocks as group-by;   (recount +
                        cardinality)      fn = position select)       butterfly)
```

### Window generation (`window_buffer`)

Incoming batches are written into a ring buffer of 2·WS_MAX tuples, one P-tuple
row per memory word, with a registered read so that it maps onto block RAM. The
read side replays `ws` tuples from the current window start, flags the window's
last batch, and then moves the start on by `wa`. When `wa < ws`, each tuple is
read `ws/wa` times, so the engine needs more cycles than the input supplies.
`in_ready` drops when the writer is a full buffer ahead of the window start.

Limits on the window:

* `ws` and `wa` must be multiples of P.
* 1 ≤ `wa` ≤ `ws` ≤ WS_MAX.
* Both must be held stable while the engine runs.

### Sorting with group sizes (`sorter_card`, `linear_sorter_card`, `card_merger`)

The sorter sorts each window by `{group, key}`. It also appends to each tuple its
group's **cardinality**, the number of tuples of that group in the window. It is
built from three kinds of parts.

**Linear sorters.** Each is a row of cells that keeps a sorted list. An inserted
tuple is compared with every cell at once. Each cell either keeps its tuple,
takes the new tuple (the first cell whose tuple is larger), or takes its left
neighbour's tuple to make room.

Each cell also compares group IDs:

* When the new tuple has the same group as the cell, the cell adds the new
  tuple's cardinality to its own.
* The new tuple starts from the cardinality of a same-group neighbour, plus its
  own.

Sorting keeps a group's tuples adjacent, so whenever the group is already present
a neighbour has it. Every tuple in the sorter therefore always holds its group's
current total.

P linear sorters of K/P cells each (K = 128 cells in all) are filled in parallel:
tuple `j` of each batch goes to sorter `j`. Equal tuples keep their arrival order.

**Merge tree.** P-1 two-input mergers in a binary tree combine the P sorted
lists. Within a list, a cardinality counts only that list's tuples, so merging
must fix them. Each merger looks at both list heads:

* When the heads share a group, the group total is the sum of their two
  cardinalities.
* Once a group's total is known, the merger remembers it. Every later tuple of
  that group takes the remembered total, whichever list it comes from.
* A head whose group is not at the other list's head keeps its own value. The
  other list's head is larger, so that list holds no more tuples of the group.

**Two modes.** Which mode runs is decided by the data, with no mode input:

* **Sorting mode: windows of at most K tuples.** The linear sorters take the
  whole window, and the tree's output is the sorted window.
* **Merge mode: windows of K+1 to K² tuples.**
  1. When the linear sorters fill before the window's last batch, the tree
     writes the sorted K-tuple chunk, with its per-chunk cardinalities, into a
     chunk memory of K² tuples.
  2. The sorters are then refilled. The last chunk may be shorter than K.
  3. After the last chunk, one more linear sorter of K cells is loaded with the
     first tuple of every chunk. Each tuple is tagged with its chunk number and
     position.
  4. The merge repeatedly pops the smallest head. It sends that head out and
     inserts the next tuple of the same chunk, read from the chunk memory.
  5. Inserted tuples bring their per-chunk cardinality, and the cells add these
     up.

Why merge mode gets the totals right: when the first tuple of a group reaches
the top, every chunk that holds the group is showing its first tuple of that
group. All smaller tuples have already left. So that head holds the sum over all
chunks, which is the window total. The total is remembered, because the later
heads of the group would otherwise be counted again, and it is given to the rest
of the group.

A packer collects the sorted stream into batches of P and flags the window's
final batch.

### Selecting and compacting results (`mark_last`, `agg_scan`, `prra`)

The sorted window passes through the same marking stage and scan as in group-by,
with `in_end` on its final batch, so no state leaks between windows.

For the ordinary operators, the last tuple of each group carries the result, as
in group-by. For `FN_MINMEDMAX`, the scan's running count gives each tuple's
position `pos` inside its group. A tuple is kept when:

* `pos == 1` (minimum), or
* `pos == card/2 + 1` (median), or
* `pos == card` (maximum).

The three can coincide, so a group yields one to three results.

`prra` then counts the surviving tuples again with a second, plain rolling prefix
scan. A reverse butterfly moves them to round-robin ports. With `use_groups` low,
every tuple's group is forced to 0, which gives aggregation over plain numbers.

**Timing.**

* **Windows of at most K tuples:** loading takes `ws/P` cycles. The tree then
  emits one tuple per cycle, plus about log2(P)+2 cycles.
* **Larger windows:** loading still runs at P tuples per cycle, but each full
  chunk is written out at one tuple per cycle before loading goes on. The merge
  pass then produces one tuple every two cycles: a pop, then an insert.
* **Rest of the pipeline:** about 3·log2(P)+2 cycles of latency, with no stalls.

## Top level (`enthuse_top`)

`mode` = 0 routes the input to the group-by engine, and `mode` = 1 routes it to
the sliding-window engine. The active engine drives the outputs.

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `mode` | in | 1 | 0 group-by, 1 sliding window |
| `fn` | in | 3 | operator |
| `use_groups` | in | 1 | sliding window: aggregate per group (1) or over all tuples (0) |
| `ws`, `wa` | in | 15 | window size and advance in tuples |
| `in_valid`, `in_ready` | in/out | 1 | input handshake (`in_ready` is always 1 in group-by mode) |
| `in_end` | in | 1 | group-by: final batch of the stream |
| `in_data` | in | P × `tuple_t` | input batch |
| `out_valid`, `out_end` | out | 1 | output batch; `out_end` after a stream's or window's last results |
| `out_res`, `out_vld` | out | P × `res_t`, P × 1 | results and port valid bits |

Change the configuration ports only while the engine is idle, best under reset.
The output has no ready signal, so the consumer must take P results per cycle.
The surrounding system (host processor, DMA, memory, configuration registers) is
not included; those connections are the top's plain ports.

Default parameters:

* P = 4;
* K = 128 sorter cells;
* WS_MAX = 16384 = K².

This gives a 2,097,152-bit window buffer and a 1,310,720-bit chunk memory.

## Differences from the published design and known limits

* **Sorter throughput.** The published sorter merges P tuples per cycle with
  parallel merge networks. This one emits one tuple per cycle from its merge tree
  and one every two cycles in merge mode. Loading does not overlap flushing.
  Results are exact, but a sliding-window engine of this size is about 4–12 times
  slower than the original at P = 4.
* **Merge-mode sorter.** The chunk heads are held in a separate K-cell linear
  sorter rather than in the loading sorters' own cells. The chunk memory stores
  each tuple's per-chunk cardinality next to it: 80-bit words instead of 64.
* **Group-by input.** The group-by engine expects sorted input. In the original
  system, a sorter placed in front of it does that sorting; that sorter is not
  part of this RTL.
* **Latency.** Group-by latency is 2·log2(P)+2 cycles, one more than the original
  figure, because of a separate register stage for the batch-to-batch roll-over.
* **Arithmetic.** Keys are treated as unsigned:
  * the sum wraps at 32 bits;
  * the average truncates;
  * the median of an even-sized group is the upper of the two middle elements.
* **Sizes.** Group and key widths are package constants (32 bits each). P can be
  set to any power of two ≥ 2, but only P = 4 has been simulated at the top.
* **Configuration.** All settings are plain ports rather than memory-mapped
  registers.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares the outputs
with a reference computed in the testbench, from `tb/enthuse_ref_pkg.sv` or by
direct counting, and prints `TB_RESULT checks=<n> failures=<n>`. Each also has a
watchdog.

* **`tb_enthuse_top`** runs at the default parameters. It covers:
  * group-by with every operator, on streams with groups across batch boundaries
    and duplicate keys;
  * sliding windows with min/med/max, sum, distinct count and count, for window
    sizes 16 to 16384 (both sorter modes);
  * windows without groups;
  * a long stream that forces backpressure.

  It counts each mechanism and fails if one never occurs. It takes about 25 s.
* **`tb_enthuse_swag`** uses K = 16 and WS_MAX = 128, so that merge mode and a
  full buffer appear in short runs.
* **`tb_sorter_card`** uses K = 16 for windows up to 256 tuples.
* **`tb_enthuse_groupby`** also checks the pipeline latency.

To simulate with Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/enthuse_pkg.sv $(ls rtl/*.sv | grep -v enthuse_pkg) \
  tb/enthuse_ref_pkg.sv tb/tb_enthuse_top.sv --top-module tb_enthuse_top
./obj_dir/Vtb_enthuse_top
```

Swap in another testbench as the top module to run it; tests of single blocks
need only the package, the block and its sub-blocks.

## Files

| file | content |
|------|---------|
| `rtl/enthuse_pkg.sv` | types, operator codes, tuple ordering |
| `rtl/mark_last.sv` | batch hold and last-of-group marking |
| `rtl/agg_scan.sv` | segmented rolling prefix scan, carry stage n', result and index |
| `rtl/reverse_butterfly.sv` | P-port compaction network |
| `rtl/prra.sv` | second prefix scan + reverse butterfly (round-robin compaction) |
| `rtl/enthuse_groupby.sv` | group-by engine |
| `rtl/window_buffer.sv` | sliding-window ring buffer |
| `rtl/linear_sorter_card.sv` | insertion sorter with group cardinality cells |
| `rtl/card_merger.sv` | two-way merger that combines cardinalities |
| `rtl/sorter_card.sv` | parallel linear sorters, merge tree, chunk memory and merge pass |
| `rtl/enthuse_swag.sv` | sliding-window engine |
| `rtl/enthuse_top.sv` | top level with both engines |
| `tb/enthuse_ref_pkg.sv` | reference model: aggregation, sorting, windowing |
| `tb/tb_*.sv` | one testbench per module |
