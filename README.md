# An IVF-PQ vector search accelerator in SystemVerilog

Approximate nearest-neighbour search over 100 million vectors is dominated by
a handful of steps that have very different costs depending on how the index
was trained. With an IVF-PQ index, a query is first compared against every
cluster centroid (`nlist` of them), the `nprobe` closest clusters ("cells")
are chosen, a small distance look-up table is built per chosen cell, every
vector stored in those cells is scored from its 16-byte product-quantisation
code with that table, and the `K` best scores are kept. The design below is
one fixed hardware pipeline for these six stages, sized for one index:
SIFT-like 128-dimensional vectors, an OPQ rotation, `nlist = 8192`,
`nprobe = 17`, `K = 10`, 16 one-byte codes per vector. The number of
processing elements (PEs) per stage is chosen so that no stage starves the
others for that index: 1 OPQ PE, 11 centroid-distance PEs, 9 table-building
PEs and 36 code-scanning PEs, each of the last reading its own memory channel.

The key idea is that hardware and index are chosen together: a different
`nlist`, `nprobe` or `K` moves the bottleneck to another stage, so the PE
counts are parameters of the RTL, not constants.

## The pipeline

```
 query ─► OPQ ─► global_ctrl ─┬─► IVFDist (11 PEs) ─► SelCells (hpq) ─┐
                              │                                       │ selected cells
                              │    ┌──────────────────────────────────┘
                              │    ▼
                              │  global_ctrl: cell → (start row, rows, count, last)
                              ▼    ▼
                            BuildLUT (residual + 9 PEs) ─► LUTs ─► PQDist (36 PEs) ─► SelK (hsmpqg) ─► K results
                                                                      ▲  ▲ … ▲
                                                                  36 memory channels
```

Every arrow is a valid/ready stream; a stage stalls only because the next one
is full. Queries overlap: while SelK is still ranking one query, the next can
already be rotated and compared with the centroids.

| Stage | Module | What it computes | Rate / latency |
|---|---|---|---|
| OPQ | `opq_pe` | y = R·x, R a D×D Q.14 matrix, saturated to 16 bit | one output element per cycle, result D+1 cycles after the query |
| fork / cell table | `global_ctrl` | copies the rotated query to IVFDist and BuildLUT; turns a selected cell into a scan command | one command per cycle |
| IVFDist | `ivf_dist_stage` of `ivf_dist_pe` | squared L2 distance from the query to every centroid | each PE one centroid per cycle; about nlist/11 cycles per query |
| SelCells | `hpq` (1 stream, queue length 17) | the 17 nearest cells | one item per cycle in |
| BuildLUT | `build_lut_stage` = `lut_residual` + `build_lut_pe` | residual r = y − c(cell), then for every sub-space s and code k the distance ‖r_s − codebook_k,s‖² | one table row (16 distances) per cycle, 257 beats per table |
| PQDist | `pq_dist_stage` of `pq_dist_pe` | for each stored vector, Σ_s LUT[s][code_s] | one vector per PE per cycle |
| SelK | `hsmpqg` (36 streams, K = 10) | the 10 smallest of everything PQDist produced | 36 items per cycle in |

### Numbers

All shared widths and types are in `fanns_pkg`: vector elements are 16-bit
signed integers, distances 48-bit unsigned, vector IDs and row addresses
32-bit, codes 8-bit. An `item_t` is `{distance, id}`; the largest item
(`ITEM_MAX`, all ones) doubles as "empty" and as padding. Arithmetic is exact
integer arithmetic apart from two saturations: the OPQ output and the
residual are clipped to 16 bits.

## Selecting the K best: the hardest part

Two selection problems appear: 17 of 8192 cells from one stream of one item
per cycle, and 10 of all scanned vectors arriving as 36 items every cycle.

**Systolic priority queue (`systolic_pq`).** A row of S registers kept sorted
with the largest item at the root. An incoming item replaces the root if it
is smaller; compare-swap units between neighbours then move the larger item of
each pair toward the root. Even pairs (0,1),(2,3),… swap on one cycle and odd
pairs (1,2),(3,4),… on the next, so a new item can enter every second cycle.
After the query's last item the queue settles for S+1 cycles and is shifted
out smallest first. This "replace only" queue is all a K-selection needs.

**Hierarchical queue (`hpq`).** To take one item per cycle per stream, each
stream feeds two level-1 queues working in opposite phases: whichever is ready
takes the item. When the query ends, the level-1 queues are drained in turn
into one level-2 queue of the same length, which emits the final S results.
SelCells is an `hpq` with one stream and S = 17.

**Sort, merge, then queue (`hsmpqg`).** 36 streams would need 72 level-1
queues. Instead, every cycle's 36 items are padded to 48 and cut into three
groups of 16; each group goes through a 16-wide bitonic sorting network
(`bitonic_sorter`, 10 pipeline stages: log2 16 · (1+log2 16)/2). Bitonic
partial mergers (`bitonic_merger`, two sorted 16-lists in, the sorted 16
smallest out, 5 stages) fold the groups together; delay lines
(`item_delay`) keep each group aligned with the running merge. Only the 10
smallest items of a cycle can matter, so those 10 enter an `hpq` with 10
streams and queue length 10, whose output is the query's result. The whole
sort/merge pipeline advances only while the queue group can accept, so a
stall never loses items.

## Scanning the codes

`pq_dist_pe` holds the current cell's table as 16 columns of 256 distances,
one memory per column, so the 16 look-ups of a vector happen in one cycle and
a pipelined adder tree sums them. A PE first loads a table (header beat plus
256 rows, which it also passes on to the next PE), then streams the cell's
rows from its memory channel.

Memory layout (this design's choice): vector j of a cell lives in channel
j mod 36 at row `start + j div 36`; a row is `{vector ID (32 bit), code[15],
…, code[0]}`. Every channel therefore reads the same number of rows,
`max(1, ceil(count/36))`. Where a cell's size is not a multiple of 36, some
channels read a row that belongs to no vector: on the last row the PE checks
`row·36 + PE index ≥ count` and outputs the maximum distance instead
(padding), so SelK sees exactly one item per channel per cycle. Each PE
issues reads only against free space in its output FIFO (credits), because
memory responses cannot be refused.

## Forwarding instead of broadcast

In IVFDist, BuildLUT and PQDist the PEs form a chain. The query (or residual,
or table) enters the first PE and each PE passes it on; results travel down
the same chain to the last PE, each PE forwarding everything from
upstream before adding its own. This keeps every net point-to-point. IVFDist
PEs own contiguous blocks of centroids (the first `nlist mod 11` PEs one
more); BuildLUT PEs own contiguous blocks of a query's 17 selected cells (the first
`17 mod 9` PEs two cells, the last one); every PQDist PE sees every
table.

## Loading an index

`fanns_top` has one load port: `ld_target` selects the OPQ matrix row
(`ld_addr` = row), a centroid (`ld_addr` = cell; written into both the
IVFDist and the BuildLUT copies), a codebook row (`ld_addr` = code k, the
128 elements of the 16 sub-codebooks for k), or a cell's table entry
(`ld_data` bits [31:0] = start row, [63:32] = vector count). PQ codes live
behind the 36 memory ports, outside this RTL.

## Top-level interface and timing

* `q_valid/q_ready/q_vec`: one 128×16-bit query per handshake.
* `res_valid/res_ready/res_item/res_last`: K items per query, ascending
  distance, `res_last` on the K-th. Fewer than K vectors in the probed cells
  gives maximum-distance padding items.
* `mem_req_*` / `mem_rsp_*` ×36: one row address per request; the response
  (no ready) comes back later, in order.
* Reset is synchronous and active low; all flops use the rising edge.

## What follows the source design and what does not

Taken from the published design: the six stages and their order, the PE
counts of the K = 10 configuration, on-chip index storage for IVFDist and
BuildLUT, the 1-D forwarding chains, the systolic replace-only queue with one
replace every two cycles, the two-queue HPQ, the sort/merge/queue-group SelK
with 16-wide sorters and 32-to-16 mergers, the column-per-sub-space table,
the adder tree and padding detection in the PQDist PE.

This design's own choices: all number formats; the OPQ schedule (one output
row per cycle); the residual computation and its saturation; the memory
layout, row format and credit scheme; the way the global controller works
(the source only names it); the merge order inside SelK; how queues are
drained at the end of a query; the load port.

Not built: the host link (PCIe), the HBM controller, the network stack used
for scale-out, and the software that trains indexes and picks PE counts.
Other configurations (K = 1 or 100, other `nlist`) are reached by changing
parameters; only the K = 10 one is tested at full size.

## Size and tool notes

At the default sizes the on-chip tables are large: the centroids (8192 ×
128 × 16 bit) exist twice, and each of the 36 PQDist PEs holds a
16 × 256 × 48-bit table. Coarse synthesis of the complete top with yosys takes a few
minutes and needs several GB of memory; about 47 Mbit of it are memories. The 16 LUT columns of a PQDist PE are written as
separate one-write, one-read memories so that they map to RAM rather than
flip-flops. Verilator lints the top
in about a second and simulates a full-size query in a couple of minutes
including compilation. Remaining lint warnings are width and
constant-comparison notes in parameterised index arithmetic (for example a
`>= 0` that is always true for the first PE) and are harmless.

## Testbenches

Every testbench is self-checking and prints one
`TB_RESULT checks=N failures=M` line.

| Testbench | Covers | Checks |
|---|---|---|
| `tb_stream_fifo` | `stream_fifo` | order, occupancy, one-cycle latency, random stalls |
| `tb_systolic_pq` | `systolic_pq` | results against a sorted reference, one replace per two cycles, drain time |
| `tb_hpq` | `hpq` | 2 streams × 17: results, one beat per cycle when idle |
| `tb_bitonic_sorter` | `bitonic_sorter` | sorted permutation, latency 10 enabled cycles |
| `tb_bitonic_merger` | `bitonic_merger` | 16 smallest of 32, latency 5 |
| `tb_hsmpqg` | `hsmpqg`, `item_delay` | 36 streams, 10 results, 36 items per cycle |
| `tb_opq_pe` | `opq_pe` | rotation with saturation, D+1 cycle latency |
| `tb_global_ctrl` | `global_ctrl` | query fork, cell commands (start, rows, count, last), one command per cycle |
| `tb_ivf_dist_stage` | `ivf_dist_stage`, `ivf_dist_pe` | every centroid distance, uneven split |
| `tb_build_lut_stage` | `build_lut_stage`, `lut_residual`, `build_lut_pe` | every table entry with saturated residuals, probe order, headers, 5 tables of 9 beats back to back |
| `tb_pq_dist_stage` | `pq_dist_stage`, `pq_dist_pe` | every output of 4 PEs: ADC sums, IDs, padding, last flags, memory and output stalls |
| `tb_fanns_top` | whole design at D=16, 32 cells, 3/2/4 PEs | 6 overlapping queries against a software model of all six stages; counts and requires OPQ, IVFDist, cell commands, tables, code reads, padding, SelK beats, memory and result back-pressure and overlapping queries |
| `tb_fanns_top_full` | whole design at default parameters | 2 queries over 8192 random cells |

The end-to-end tests share `tb/fanns_top_tb_body.svh`; `tb/hbm_model.sv` is a
behavioural memory with fixed latency and random back-pressure.

To run one with plain verilator:

```
verilator --binary --timing --assert -y rtl -y tb rtl/fanns_pkg.sv tb/tb_fanns_top.sv \
          --top-module tb_fanns_top
obj_dir/Vtb_fanns_top +verilator+rand+reset+2
```
