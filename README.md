# Triangle counting in computational STT-MRAM

This is synthesizable SystemVerilog for an accelerator that counts the
triangles of an undirected graph. It uses only two operations: a bitwise AND
performed inside a magnetic (STT-MRAM) memory array, and a population count
("BitCount") of the result.

The idea rests on one identity. Let `A` be the adjacency matrix with each edge
stored once, above the diagonal (`A[i][j] = 1` only for `i < j`). Then

    triangles = sum over all A[i][j] = 1 of  BitCount( R_i AND C_j )

Here `R_i` is row `i` of `A` and `C_j` is column `j`. A bit `k` that is set in
both vectors means the edges `i-k` and `k-j` exist, with `i < k < j`. Together
with `i-j` they close a triangle, and each triangle is found exactly once, at
its smallest and largest vertex. No multiplication and no value larger than one
bit is ever stored. Each AND is done by raising two word lines of the memory
array at once and sensing the summed bit-line current against a threshold.

Real graphs are extremely sparse, so rows and columns are never handled
whole. Each one is cut into 64-bit **slices**. Only the **valid** slices (those
holding at least one 1) are kept. Only pairs `(R_i slice k, C_j slice k)` where
both slices are valid are sent to the memory. Column slices stay in the memory
after use, so that later rows can reuse them. When the memory is full, the
slice swapped out is the one whose column is next needed furthest in the
future (the **Priority** policy).

## A worked example

Take four vertices with the edges 0-1, 0-2, 1-2, 1-3 and 2-3. Then
`R_0 = 0110`, `R_1 = 0011`, `R_2 = 0001`, `C_1 = 1000`, `C_2 = 1100` and
`C_3 = 0110`, with bit 0 written first. The five non-zeros are handled in
row order:

| non-zero | row slice | column slice | AND  | count | running total |
|----------|-----------|--------------|------|-------|---------------|
| A[0][1]  | 0110      | 1000         | 0000 | 0     | 0             |
| A[0][2]  | 0110      | 1100         | 0100 | 1     | 1             |
| A[1][2]  | 0011      | 1100 (reused)| 0000 | 0     | 1             |
| A[1][3]  | 0011      | 0110         | 0010 | 1     | 2             |
| A[2][3]  | 0001      | 0110 (reused)| 0000 | 0     | 2             |

The two triangles are 0-1-2 and 1-2-3. `C_2` and `C_3` are each written into
the memory once and used twice. `tb_tcim_top` runs exactly this graph first.
The run gives 5 pairs, 2 column hits and 3 column misses.

## Structure

```
tcim_top
 ├─ data_slicer      raw rows/columns  ->  valid slices (k, 64 bits)
 ├─ graph_store      compressed graph: per row and per column, a pointer table
 │                   and a list of valid slices (index k + data)
 ├─ status_table     which column slice sits in which memory slot, its
 │                   next-visit key; which row slice each mat holds
 ├─ controller       the counting loop; contains
 │   └─ reuse_replace   hit test and Priority victim choice for one set
 └─ stt_mram_array   computational memory, 16 MB by default
     └─ bank x8         global row decoder, global data buffer
         └─ subarray x16   column selection line
             └─ mat x4        4096+1 rows x 64 bits, row driver,
                 ├─ sense_amp    READ / AND references
                 └─ bit_counter  8-bit look-up tables + adder
```

Shared types are in `tc_pkg`: the slice width, the 8 ways, the memory
operation codes, the row/column direction, and the `tc_stats_t` event
counters.

## The computational memory

A **mat** stores 64-bit words, one slice per physical row. It has `ROWS` data
rows for column slices and one extra row, the **row-slice line** (row index
`ROWS`), for the row slice of the pair being computed. Three operations exist:

* `MOP_WRITE`: the column driver writes `wdata` into `row_a`.
* `MOP_READ`: one word line is raised. The sense amplifier compares each
  bit-line current with a reference between the anti-parallel and the
  parallel cell current, so it returns the stored word.
* `MOP_AND`: the word lines `row_a` and `row_b` are raised together. The
  currents of the two cells add. The AND reference lies between "one P cell
  plus one AP cell" and "two P cells", so the output is 1 only where both
  cells hold 1 (logic 1 = parallel, low-resistance state).

`sense_amp` models this at the logic level. Per bit line it counts how many
raised cells are in the P state (0, 1 or 2) and compares that count with 1
(READ) or 2 (AND). The analog comparator and the 1T-1MTJ cell are not
modelled: the cell array is an ordinary memory array.

The sensed word goes into the mat's **local data buffer** (a register). The
mat's **bit counter** counts its ones. It splits the word into eight bytes,
looks each byte up in a 256-entry table of bit counts, and adds the eight
results. Mats answer only when addressed, and drive zeros otherwise. Sub-arrays
and banks therefore combine answers with an OR. Each bank registers the result
in its **global data buffer**.

**Timing.** The array takes one request per cycle and never stalls. A WRITE
takes effect at the clock edge that accepts it. A READ or AND result
(`rsp_valid`, `rsp_data`, `rsp_count`) appears two cycles after the request
cycle: one cycle for the mat's local buffer and one for the bank's global
buffer.

**Size.** 8 banks × 16 sub-arrays × 4 mats × 4096 rows × 8 bytes = 16 MB of
slice storage, which is 2,097,152 slots. The total of 16 MB is the capacity
behind the performance results this design follows. The split into banks,
sub-arrays and mats is this design's own choice.

## Where slices live: slots, sets and the row-slice line

The data rows are managed like an 8-way set-associative cache:

* A column slice `C_j S_k` has the tag `{j, k}`. It belongs to set
  `{k, j} mod NSETS` (the low bits of `k · 2^VB + j`).
* Slot `s = set · 8 + way` is data row `s mod ROWS` of mat `s / ROWS`.
  The 8 ways of a set therefore normally lie in one mat.
* `status_table` holds a valid bit, the tag and a next-visit key for every
  slot. For every mat it also records which row slice `{i, k}` its row-slice
  line holds.

Before an AND, the row slice `R_i S_k` is written into the row-slice line of
the mat that holds `C_j S_k`. The write is skipped if that line already holds
`R_i S_k`. This happens often, because consecutive non-zeros of a row usually
need the same row slice. This is the "row overlapping" reuse. Column slices
are reused across rows through the status table.

After reset, and again at every `start`, the status table sweeps all sets
clear, one per cycle. At the default size this takes 262,144 cycles. A slice
left over from an earlier graph can never be mistaken for a resident one.

## The counting loop (controller)

The controller walks the compressed graph in stored row order:

1. **S_ROW / S_RENT / S_BIT.** For row `i`, take each valid slice `(k, bits)`
   and each 1 in it. This gives a non-zero `A[i][j]` with `j = 64k + bit`.
2. **S_COL / S_NU.** Fetch column `j`'s list of valid slices. Scan it for the
   first row `i' > i` with `A[i'][j] = 1`. That row is the column's next
   visit. The key `{never, i', j}` orders all future accesses in the order the
   loop will make them. "Never" sorts last.
3. **S_MERGE.** Merge the sorted slice lists of `R_i` and `C_j`. A slice
   index present in only one list is skipped (and counted in
   `stats.skipped`). Each index present in both lists is a valid pair.
4. **S_LOOKUP.** Look `C_j S_k` up in its set.
   * On a hit, the slot is used as it is.
   * On a miss, the lowest empty way is taken. If there is none, the way with
     the largest key is taken, and the slice in it is swapped out.
   * The column slice is then written to that slot.
   * In both cases the slot's key is set to the new next-visit key.
5. **S_ROWLINE.** Write the row slice into that mat's row-slice line, unless it
   is already there.
6. **S_AND / S_WAIT.** Issue the AND and add the returned bit count to
   `tc_count`.

Each state takes one cycle, except S_NU (one cycle per scanned column slice),
S_MERGE (one cycle per merge step) and S_WAIT (the memory latency). A computed
pair therefore costs five cycles plus the two-cycle memory latency.

**How exact the replacement is.** The key of a slot is refreshed only when the
slot is accessed. Suppose column `j` is visited at row `i'`, but
`R_{i'} S_k` is invalid there. Then the resident slice `C_j S_k` is not
touched, and it keeps a key that now lies in the past. The slice is then less
likely to be evicted than true future knowledge would make it. Keys are also
per column, not per slice. This is a hardware-friendly reading of "swap out
the column with the longest time until its next visit".

## Compressed graph and the input stream

`graph_store` keeps, separately for rows and for columns:

* a pointer table `ptr[v]`: the entries of line `v` are
  `ptr[v] .. ptr[v+1]-1`;
* entries `(k, 64 data bits)`, in increasing `k` within a line.

The slice data is stored uncompressed. It is written to the memory as it is,
with no decoding. Read ports are combinational.

The host fills the store through `data_slicer`. The protocol:

* Pulse `s_clr` with `s_dir` to restart a direction.
* Stream every line `v = 0, 1, …, |V|-1` in order. Each line is sent as all
  its `ceil(|V|/64)` slices, `k = 0, 1, …`, one per cycle with `s_valid`, and
  with `s_last` on the final slice.
* All-zero slices are dropped. Each valid slice becomes the next entry.
* At the end of line `v`, the running count is written as `ptr[v+1]`.
* If a direction runs out of entries, `slice_overflow` rises (sticky) and
  further slices of that direction are lost.
* `slice_n_valid` and `slice_n_total` count the slices of the direction last
  streamed.

Stream both the rows and the columns of `A`. Then pulse `start` with `num_v`
(the number of vertices). `busy` stays high while the count runs. `done` rises
when `tc_count` (64 bits) and `stats` are final, and stays high until the next
`start`.

`stats` (`tc_stats_t`) holds the following counters:

* non-zeros visited;
* valid pairs computed;
* slices skipped while merging;
* column hits, column misses and evictions;
* row-slice writes and row-slice reuses.

## Parameters of `tcim_top`

| parameter | default | meaning |
|-----------|---------|---------|
| `VB` | 16 | vertex index bits: up to 65,535 vertices |
| `EB` | 17 | graph store: 2^17 = 131,072 valid slices per direction |
| `ROWS` | 4096 | data rows per mat (plus the row-slice line) |
| `MATS` | 4 | mats per sub-array |
| `SUBARRAYS` | 16 | sub-arrays per bank |
| `BANKS` | 8 | banks |

The slice width (64) and the number of ways (8) are fixed in `tc_pkg`. `ROWS`
and the number of sets should be powers of two. The set and slot arithmetic
assumes it.

**What fits at the defaults.** The graph store is the limit, not the 16 MB
array. A graph fits if it has at most 65,535 vertices and at most 131,072
valid slices per direction. The valid slice counts below are estimated from
published compression rates:

* ego-facebook (4,039 vertices, about 19,000 valid slices) fits.
* email-enron (36,692 vertices, about 82,000 valid slices) fits.
* Larger public graphs (about 300,000 to 4 million vertices) need `VB` of 19
  to 22 bits and a larger `EB`. They also need a store far larger than
  simulation-friendly sizes.

At 16 MB, both graphs that fit keep every column slice resident, so no
eviction happens. Eviction is exercised at reduced sizes.

## What follows the source design and what is this design's own

These parts follow the source design:

* the AND/BitCount formulation and the row-by-row order;
* 64-bit slices, the validity rule and the pairing of valid slices only;
* reuse of resident column slices, and overwriting the row slice once its row
  is done;
* swapping out the slice whose next use is furthest away;
* the mat contents (column driver, multi-row row driver, READ/AND sense
  amplifiers, local data buffer, byte look-up-table bit counter);
* the bank / sub-array / mat hierarchy with a global row decoder and a global
  data buffer;
* 16 MB of computational memory and an 8-way organisation.

These are this design's own choices:

* all interfaces, widths, latencies and state machines;
* the pointer-table store format and the slicer stream;
* the mapping of sets to slots, and the extra row-slice line per mat;
* the next-visit key and its refresh-on-access rule;
* clearing the status table at `start`;
* the bank, sub-array and mat counts;
* the order inside one pair. The row slice is written after the column
  lookup, because it must go to the mat that the column slice was given;
* the 16 MB capacity, which the overall performance figures assume. The
  published hit and miss ratios were instead measured on an 8 MB array. That
  array is `BANKS = 4` here.
* the store sizes.

These parts are not built:

* the analog cell, the sense-amplifier circuit and the device parameters;
* the host processor;
* the LRU policy, which is used only for comparison;
* the greedy and zig-zag row orders, which are offered only as alternatives
  for dense graphs;
* a 32-bit slice index field as in the storage-size formula. Here the index
  is `VB-6` bits wide.

Every operation is serialised, one slice pair at a time. The bank/sub-array
parallelism of the array is present in the structure but not exploited by the
controller. No energy or timing figures are claimed.

## Testbenches and how to run them

Each testbench is self-checking. It prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_bit_counter` | fixed and random words against a loop count, W = 64 and 16 |
| `tb_sense_amp` | AND truth table per bit line, random READ/AND |
| `tb_mat` | READ/AND data, bit count, one-cycle latency, row-slice line |
| `tb_subarray`, `tb_bank`, `tb_stt_mram_array` | random READ/AND over all mats against a model, only the addressed mat answers, latency 1 / 2 / 2 |
| `tb_data_slicer` | entries, pointers, counters, overflow |
| `tb_graph_store` | pointer and entry read-back in both directions |
| `tb_status_table` | clear sweep length, per-way writes, row-slice line tags |
| `tb_reuse_replace` | hit, free-way and Priority victim choice against a model |
| `tb_controller` | controller with a 16-slot memory: triangle count and every event counter against a reference model, repeated runs |
| `tb_tcim_top` | whole accelerator at reduced size; see below |
| `tb_tcim_full` | one complete count at the default size (16 MB) |

`tb_tcim_top` uses 64 slots and three graphs: the four-vertex example, a
5-clique spread over three slices, and a random 200-vertex graph. For each
graph it checks the triangle count against brute force, and every counter
against the reference model in `tb_graph_pkg`. It also requires each mechanism
to happen at least once:

* dropped invalid slice;
* merge skip;
* column hit and column miss;
* eviction;
* row-slice write and row-slice reuse;
* store overflow.

`tb_tcim_full` counts a 300-vertex graph. It needs about 297,000 cycles, most
of them for clearing the status table. It takes about 3 minutes to build and
1 minute to run.

To run a testbench with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tc_pkg.sv tb/tb_graph_pkg.sv \
          tb/tb_tcim_top.sv --top-module tb_tcim_top -Mdir obj -o sim
./obj/sim
```

For the block testbenches, `tb/tb_graph_pkg.sv` can be left out. Verilator
finds the other modules in `rtl/` through `-Irtl`. Add `-Wno-fatal` if lint
warnings should not stop the build.

**How far to trust it.** The counting result and every event counter are
checked against independent models, at reduced and at default sizes. The
memory is a logic-level stand-in for the magnetic array. Sensing margins,
write failures and device timing do not exist here.
