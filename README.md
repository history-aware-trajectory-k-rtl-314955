# History-aware trajectory k-anonymization in hardware

Location-based services collect streams of user positions. Segment-based
k-anonymization makes such a stream publishable. It maps each user's
movement onto road segments, meaning the stretch of road between two
neighbouring intersections. It then releases only the segments that at
least *k* users travelled. The hard part is deciding *which* road a user
took between two sparse position samples. The classic answer is the
shortest path, but drivers often prefer a longer arterial road. The
history-aware variant answers from a database of earlier trajectories. Every
past trip that went from the same start intersection to the same end
intersection counts as a candidate. The current user's one unit of count is
split evenly over the *h* candidates (1/h each). The shortest path is used
only when history has nothing to offer.

This RTL implements that method as a streaming pipeline for an FPGA, after
the architecture of H. Nakano and H. Nishi, "History-Aware Trajectory
k-Anonymization Using an FPGA-Based Hardware Accelerator for Real-Time
Location Services". The paper gives the block structure, the history-scan
algorithm, the selection rule and the Q16.16 counter. Everything it leaves
open was filled in here and is marked as such below and in each file's
header.

## Data flow

```
 location records ──► node_search_engine ──► pair forming ──► trajectory_search_engine ──► segment_generator ──► segment_counter ──► published segments
 {user, lat, lon}      nearest map node       (prev, cur)      ┌ shortest_path_search ┐      (a,b) + weight      Q16.16 table,        {a, b, count}
                                               node pair        │         ‖            │                          count >= k
                                                                └ history_search ──────┘
                                                                  trajectory_select: h>0 ? h paths x 1/h : shortest x 1
```

`kanon_top` wires these blocks together. In the paper a processing system
(ARM cores with PYNQ) and a DMA engine surround it. Those are not part of
this RTL. The record stream (`loc_*`) and the published-segment stream
(`pub_*`) are plain valid/ready ports where the two DMA channels would
attach. The map and the history log are preloaded with the bitstream in the
paper. Here they are written through load ports (`node_*`, `row_*`, `adj_*`,
`hist_*`) before the first record.

## Data the accelerator holds

| memory | contents | default size | where |
|---|---|---|---|
| node coordinates | {lat, lon}, 32-bit signed each | 4,500 nodes | `node_search_engine` (BRAM) |
| road graph | CSR: `row_ptr[v]..row_ptr[v+1]-1` index `{dst, len}` entries | 4,501 pointers, 10,200 entries | `shortest_path_search` |
| history log | time-ordered `{node, user}` entries | 100,000 entries | `history_search` (BRAM) |
| history hits | node buffer + (base, hops) table | 2,048 nodes, 32 paths | `history_search` |
| segment counts | `{valid, a, b, count}` | 8,192 words | `segment_counter` (BRAM) |

Node IDs are 13 bits, enough for the 4,500 intersections of the paper's test
map. User IDs are 16 bits and edge lengths 16 bits. Counts are unsigned
Q16.16 (16 integer and 16 fraction bits), as the paper specifies. The
history log is the paper's "single, large, time-ordered log of (n, u)
tuples". It is built offline: each user's sparse samples are joined by
shortest paths, so that consecutive entries of one user are neighbouring
nodes.

## The history scan

`history_search` is the core of the method. It is also the block whose
behaviour is least obvious from its description.

For a pair (ns, ne) the whole log is read once, from entry 0 to
`hist_len-1`, one entry per clock. A tracker follows the read data:

* **Idle.** An entry with node `ns` starts a track. The tracker latches that
  entry's user and starts a temporary path `[ns]` with 0 hops.
* **Tracking.** Each following entry either *breaks* the track or is
  appended to the path (hops + 1). It breaks the track if its user differs,
  if its node is `ns` again, or if the path already has `max_hop` hops. An
  appended node equal to `ne` makes a *hit*. The path is kept and the
  tracker returns to idle.
* **Break.** The partial path is thrown away. The same entry is then judged
  as an idle entry. So an entry that broke the track by revisiting `ns`
  immediately starts a new track. This reproduces the paper's nested loop
  (outer loop over start positions, inner loop tracking). Between a track's
  start and its end no other `ns` entry can occur, so a single pass gives
  the same hits as the nested loop.

The scan takes exactly `hist_len + 2` cycles, whatever the log holds. The
node buffer is written while tracking. An abandoned track is discarded by
not advancing the committed base pointer. A hit that finds the path table
or the node buffer full is counted in `num_dropped` and lost.

**Hop limit and parallelism.** The paper's algorithm computes
`maxHop = shortest-path hops + Δh` first, then scans. The paper also says
the two searches run in parallel. Both hold here through a split:

1. The history scan runs with a fixed limit `HOP_CAP` (255).
2. `trajectory_select` then drops every hit with more than `hops_sp + Δh`
   hops.

A path of at most `hops_sp + Δh` hops is never cut by the tracker's limit,
so the two forms accept the same paths whenever `hops_sp + Δh ≤ HOP_CAP`.
The testbenches check exactly this equivalence against the sequential form.

## Selection and weighting

When both searches have signalled done, `trajectory_select` makes a first
pass over the stored hits. It counts those that pass the hop filter, giving
h (the filter can be switched off with `hop_filter_en`). Then:

* **h > 0.** Every valid historical path is streamed with weight
  `floor(2^16 / h)`.
* **h = 0 and a shortest path exists.** The shortest path is streamed with
  weight `1.0` (`0x0001_0000`).
* **Otherwise.** Nothing is counted (`used_none`).

The reciprocal is truncated. So h paths add up to slightly less than one
user, for example 3 × 0x5555 = 0xFFFF. A segment therefore reaches the
integer threshold *k* only when its weight sums round up to at least k in
Q16.16. The paper does not say how it rounds 1/h.

With no shortest path there is no baseline, and the hop filter then accepts
every historical path. This case is this design's own choice.

`segment_generator` turns the node stream into segments
`(min(a,b), max(a,b))`, each carrying its path's weight. A segment that
appears in several of the h paths is counted once per path, as the method
prescribes. Segments are undirected in this design, so both directions of a
road share one count. The paper defines a segment only as "two neighbouring
nodes".

## Shortest path search

The paper only names Dijkstra's algorithm and the outputs: the node
sequence and the hop count. The organisation here was chosen for
simplicity:

* The per-node flags (seen, settled) are cleared at the start,
  `num_nodes` cycles.
* The frontier is an open list of up to `OPEN_MAX` (node, distance)
  entries. Each pop scans the list for the minimum, one entry per cycle.
  Improved neighbours are appended. Stale duplicates are skipped when they
  are popped (lazy deletion).
* The search stops once `ne` is settled. The path is then traced back
  through `prev[]` into a buffer that is read out start-first.
* An open-list overflow or a path longer than 255 hops ends the search with
  `found = 0` and `overflow = 1`.

For two nearby samples the search settles a few hundred nodes at most. It
finishes well inside the history scan, which then sets the pace as the
paper describes. An *unreachable* end node is different: Dijkstra settles
the entire reachable map, which can take longer than the scan. The
full-size test contains such a pair.

## Segment counter

Each segment is hashed to a word address by an XOR/shift fold of a and b.
The word holds a tag (a, b) next to the count, so collisions are detected.
A collision is resolved by linear probing over up to `MAX_PROBE` (8) words.
A segment that finds no free or matching word is dropped and counted in
`dropped`. Each update is a read-modify-write of 2 cycles, plus 1 per extra
probe. Counts saturate at `0xFFFF_FFFF`. The table is wiped after reset and
on `clear`, one word per cycle (8,192 cycles).

`publish` scans the table and streams every segment with
`count >= k·2^16`. It then pulses `pub_done` with `num_published` and
`num_segments`, the number of distinct segments seen. The paper's data
retention rate is `num_published / num_segments`.

## Using the top level

1. Hold `rst_n` low, then release it. Wait for `idle`; the segment table is
   being wiped until then.
2. Load the node coordinates, the CSR graph (`row_ptr[0..N]` and the
   adjacency entries) and the history log. Set `num_nodes`, `hist_len`,
   `hop_filter_en`, `delta_h` (the paper uses 5) and `k`.
3. Stream location records on `loc_*`. Each user's records must arrive
   together and in time order. Two consecutive records of the same user
   that map to different nodes form one (start, end) pair. A record on the
   same node as the one before counts as a stay and forms no pair. A record
   of a new user starts that user's sequence. This pair forming is this
   design's reading of "for each pair of approximated start and end nodes".
   Timestamps are not carried, because nothing downstream uses them.
4. When `idle` is high again, pulse `publish` and drain `pub_*` until
   `pub_done`. You may publish again with another `k`. Pulse `clear` to
   start a new counting window.

`stats` counts records, pairs, stays, new users, pairs resolved from
history, pairs resolved by shortest path, pairs with no path, dropped
history hits and shortest-path overflows.

## Timing and throughput

| stage | cycles |
|---|---|
| node search | `num_nodes + 1` per record (exhaustive scan) |
| history search | `hist_len + 2` per pair, always |
| shortest path | `num_nodes` (clear) + pops × open-list length + edges; normally under the history scan |
| selection | stored hits + 1 per emitted node |
| segment count | 3 per segment |

Node search of the next record overlaps the current pair's search through a
one-entry pair register. In practice a pair therefore costs about
`hist_len` cycles. With 100,000 history entries the full-size test measures
about 75,000 cycles per input record.

The paper reports about 107 MHz and more than 6,000 records/s with a
70,000-entry history log. One entry per cycle at 107 MHz gives only
107e6 / 70,002 ≈ 1,530 pairs per second. The paper's throughput curve reads
about 34,000 records/s at 10,000 entries and about 6,300 at 70,000. Those
figures imply three to four entries per cycle. The paper does not describe
how its design achieves that, so this RTL keeps the plain single-pass scan
the text describes. It is 3 to 4 times slower than the reported throughput.

## Parameters

| parameter | default | origin |
|---|---|---|
| `NUM_NODES` | 4500 | the evaluated map has 4,500 intersections |
| `ADJ_DEPTH` | 10200 | 5,100 roads of the map, stored in both directions (assumption) |
| `HIST_DEPTH` | 100000 | largest history size in the paper's throughput sweep |
| `OPEN_MAX` | 256 | own choice |
| `MAX_PATHS`, `PATH_MEM` | 32, 2048 | own choice |
| `HOP_CAP` | 255 | own choice (8-bit hop counts) |
| `TABLE_DEPTH`, `MAX_PROBE` | 8192, 8 | own choice (above the 5,100 roads) |
| `delta_h` (port) | – | the paper uses 5 |
| `k` (port) | – | the paper sweeps 2 … 256 |

## Departures from the paper and own choices

* **Throughput.** It is 3 to 4 times below the reported figure (see above).
* **Node search.** It is an exhaustive nearest-node scan. The paper's
  predecessor used hash tables, which are not described.
* **Hop limit.** It is applied after the scan rather than during it. The
  results are equivalent up to `HOP_CAP`.
* **Shortest-path hardware.** The open list, CSR map format, buffer sizes
  and overflow handling are all own choices.
* **Segment counter details.** The hash, the tag, probing, dropping and
  saturation are own choices. The paper gives BRAM, Q16.16 and "hashed to a
  BRAM address".
* **Weights and segments.** 1/h is truncated, and segments are undirected.
* **Pair forming.** It is as described under "Using the top level", and
  timestamps are ignored.
* **Result buffer limits.** At most `MAX_PATHS` history hits are kept per
  pair. Extra hits are dropped and counted, and the weight uses the number
  kept.
* **Memory loading.** Map and history memories are loaded through ports
  instead of with the bitstream. The host processor and the DMA engine are
  not included.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Expected values come from independent
models: a brute-force nearest node search, plain O(V²) Dijkstra, the
history search as literal nested loops, and an associative-array segment
count. `tb/kanon_ref_pkg.sv` collects the full-method reference used by the
engine and end-to-end tests.

* `tb_kanon_top` runs the whole pipeline on a 192-node map with a
  1,500-entry log and 160 records. It compares every published segment and
  count for k = 1, 2, 4 and every event counter with the reference. It also
  requires each mechanism to occur:
  * history used, including several paths at 1/h;
  * shortest-path fallback;
  * the hop filter discarding a path;
  * a pair with no path;
  * stays and user changes;
  * suppression below k;
  * output back-pressure.
* `tb_kanon_top_full` runs the same checks with every parameter at its
  default: a 4,500-node map and a 100,000-entry log scanned in full for each
  of 19 pairs.
* The unit tests cover:
  * latency, scan time and stall behaviour;
  * history-buffer overflow and open-list overflow;
  * hash collisions, probe-chain drops and count saturation;
  * publication at exactly `count = k`.

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/kanon_pkg.sv tb/kanon_ref_pkg.sv tb/tb_kanon_top.sv --top-module tb_kanon_top
./obj_dir/Vtb_kanon_top
```

The full-size test takes a few seconds. Assertions in the RTL check the
valid/ready rules: an offered item stays stable until it is taken. They
also check that commands arrive only while the pipeline is idle.

## Files

`rtl/kanon_pkg.sv` holds the shared widths, record structs and the Q16.16
helpers. `rtl/sdp_ram.sv` is the block-RAM template. Each other
`rtl/<block>.sv` holds one block named above, and `kanon_top.sv` is the top
level. In `tb/`, each `tb_<block>.sv` tests one block. `kanon_ref_pkg.sv` is
the reference model. `kanon_e2e.svh` is the body shared by the two
end-to-end tests.
