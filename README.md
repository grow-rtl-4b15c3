# GROW: a row-stationary sparse x dense GEMM accelerator for GCN inference

A graph convolutional layer computes `X' = act(A · X · W)`. `A` is the graph's
adjacency matrix: huge and extremely sparse. `X` holds the node features and
may be sparse too. `W` is a small dense weight matrix. Evaluating it as
`A · (X · W)` turns the layer into two sparse-times-dense products:

* **combination**: `XW = X · W`
* **aggregation**: `A · XW`

This RTL computes both products with one datapath, using Gustavson's row-wise
product. Output row `r` is built from the nonzeros of LHS row `r`. Each nonzero
`LHS[r][c]` scales the dense RHS row `c`, and the result is added into output
row `r`. The LHS row and the output row stay put while the RHS rows stream
past, so the dataflow is called *row-stationary*. Output rows do not depend on
each other. Several of them can therefore be in progress at once.

In aggregation the RHS is `XW`, with one row per graph node, and the rows it
needs follow the graph's edges. Real graphs follow a power law: a few
high-degree nodes (HDNs) take most of the edges. The design exploits this in
three ways:

1. **HDN caching.** The dense rows of the top HDNs are pinned in a large
   on-chip scratchpad, the HDN cache. A fully associative list of their node
   IDs decides in one cycle whether a nonzero's RHS row is on chip.
2. **Per-cluster HDN lists.** Software reorders the nodes offline into graph
   partitions (clusters). It then picks the top HDNs *of each cluster*. The
   hardware reloads the HDN list and the cache before each cluster.
3. **Multi-row runahead.** A nonzero whose RHS row is not cached (a
   low-degree node, LDN) does not stall the engine. Its fetch is recorded in
   two small tables, and the controller moves on to the next rows. Up to 16
   output rows can be open at once. Each open row is completed when its
   missing RHS rows arrive from DRAM.

## Block structure

| module | role | default size |
|---|---|---|
| `grow_top` | the accelerator; DRAM port and job interface | |
| `control_unit` | job phases, issue, runahead, miss return, retire | window 16 rows |
| `ldn_table` | in-flight missed RHS rows: valid + 32-bit row ID | 16 entries (64 B) |
| `lhs_id_table` | nonzeros waiting for a missed row: valid, LDN index (4 b), output slot (4 b), value (64 b) | 64 entries (544 B) |
| `dma_unit` | all DRAM traffic; steers read returns to their destinations | 32 reads outstanding |
| `ibuf_sparse` | FIFO of LHS nonzeros (CSR) | 128 beats x 8 nonzeros (12 KB payload) |
| `ibuf_dense` | HDN ID list + HDN cache, with the lookup logic | |
| `hdn_id_list` | CAM of the cluster's HDN IDs (24-bit) | 4096 entries (12 KB) |
| `hdn_cache` | pinned dense rows, 16 banks of `sram_sp` | 4096 rows x 128 B (512 KB) |
| `obuf_dense` | output rows being accumulated, one per runahead slot | 16 x 128 B (2 KB) |
| `mac_array` | 16 x 64-bit multiply-accumulate (scalar x row) | 16 lanes |
| `grow_pkg` | widths, the nonzero record, the counter struct | |

The capacities follow the published configuration. This includes the 4096-ID
list, the 512 KB cache, the 16/64-entry tables and their field widths, 16 MACs
of 64 bits, a runahead degree of 16, a 2 KB output buffer and a 12 KB sparse
buffer.

## Data formats

Every DRAM transfer is a 1024-bit beat (128 B). One beat is exactly one dense
row of 16 x 64-bit words. At 1 GHz this gives 128 GB/s. A dense matrix (`W`,
`XW`, or the output) keeps row `r` at `base + 128·r`. Wider feature dimensions
are processed in 16-column slices, each stored as its own matrix.

The sparse LHS is stored as a stream of 16-byte records, eight per beat:

| bits | field |
|---|---|
| 63:0 | value |
| 95:64 | column = RHS row ID |
| 126 | last nonzero of its row |
| 127 | empty row (no nonzeros; other fields ignored) |

Rows appear in order. The *last* flag plays the part of the CSR row-pointer
array, and an *empty* record stands for a row with no nonzeros. Aggregation
matrices normally include self-loops, so every row has at least one nonzero.

An HDN list holds one node ID per 32-bit word, using the low 24 bits, with 32
IDs per beat. IDs within one list must be distinct.

All arithmetic is 64-bit two's complement and wraps modulo 2^64. Fixed-point
scaling, if wanted, is up to the software.

## Running a job

One job processes one cluster. Set the `cfg_*` inputs and pulse `start`. The
descriptor is latched, so it may change as soon as the job has started.

| input | meaning |
|---|---|
| `cfg_list_base`, `cfg_hdn_count` | HDN list of this cluster (0..4096 IDs) |
| `cfg_xw_base` | dense RHS matrix (`XW`, or `W` for combination) |
| `cfg_sp_base`, `cfg_nnz_count` | the cluster's nonzero records and their number |
| `cfg_row_base`, `cfg_num_rows` | first output row and row count |
| `cfg_out_base` | output matrix |

`done` pulses once every row of the cluster has been written back. `stats`
then holds the job's counters: cycles, hits, misses, merged misses, return
MACs, runahead events, stall cycles of both kinds, empty rows and rows done.

To run **combination** (`X · W`), list W's own row IDs `0 .. K-1` as the
"HDNs". `W` then sits wholly in the HDN cache and every lookup hits. This
needs K ≤ 4096 input features.

## How a job runs

1. **LIST**: the list CAM is cleared and the DMA loads the cluster's HDN IDs
   into it.
2. **FILL**: for each list entry `i`, the DMA reads the dense row of that node
   and writes it into cache slot `i`.
3. **RUN**: the DMA streams the nonzero records into `ibuf_sparse`. It only
   requests a beat when the buffer has room for it and for every beat already
   in flight. The controller handles one record per cycle:
   * *New row*: take the lowest free output slot and clear it. If all 16
     slots are in use, wait. This is the runahead window.
   * *Hit*: the CAM lookup and the cache read happen in one cycle. In the next
     cycle the MAC array adds `value x row` into the row's slot.
   * *Miss*: if the same RHS row is already being fetched, the nonzero joins
     that LDN entry (a merge). Otherwise a new LDN entry is allocated and a
     fetch is sent to the DMA. In both cases an LHS ID table entry
     `{LDN index, slot, value}` is written and the slot's pending count rises.
     The controller does not wait. After the row's last record it starts the
     next row. If either table is full, the controller waits.
   * *Return*: the DMA hands back a fetched row and holds it. The LHS ID table
     is searched for that LDN index. One matching nonzero per cycle is
     multiplied into its slot and its entry freed. When no match remains, the
     LDN entry is freed and the row released. A hit in stage 2 has priority
     for the MAC array. A new miss to a row that is being drained waits until
     the drain has finished, so one row never has two LDN entries.
   * *Retire*: a slot whose row has seen its last record, and has no pending
     nonzeros and no hit in flight, is written to DRAM and freed. Rows
     therefore leave out of order.

Throughput when all lookups hit is one nonzero per cycle, plus one cycle per
row to open its slot. Misses cost no issue cycles until the window or a table
fills up.

## Interfaces and timing

* **DRAM read**: `mem_rd_req_valid/ready/addr`, then
  `mem_rd_resp_valid/ready/data`, returned in request order. The DMA keeps a
  32-entry tag FIFO, which records what each outstanding beat is for. Its read
  priority is LDN fetch, then list, then fill, then the sparse stream.
  `mem_rd_req_ready` must not depend on `mem_rd_req_valid`.
* **DRAM write**: `mem_wr_valid/ready/addr/data`, one output row per beat.
* Reset is asynchronous and active low.
* The MAC array is combinational. In hardware it would need pipelining at
  1 GHz.

## Where this RTL departs from, or adds to, the published design

The published description names the blocks. It gives their capacities, the
fields of the two runahead tables, the lookup rate of the ID list and the
runahead policy. It does not give cycle-level behaviour. The following are
this implementation's own choices:

* the 128-byte DRAM beat, and the address layout of every matrix;
* the nonzero record format: the last/empty flags replace CSR row pointers,
  and the record is 16 B in DRAM and 12 B plus flags on chip;
* the 64-bit integer number format;
* the in-order DRAM protocol, the 32-deep tag FIFO and the DMA priorities;
* the fall-through FIFO organisation of `ibuf_sparse`;
* the two-stage hit pipeline, MAC arbitration, stall rules and out-of-order
  retirement in `control_unit`;
* the waiting rule for a miss to a row that is being drained;
* combination run by listing all of `W` as HDNs;
* one job per cluster, with the host sequencing the clusters, the 16-column
  slices and the two layers.

Not included:

* the activation function (for example ReLU) between layers; its hardware is
  not described;
* the offline graph partitioning and HDN selection, which are software;
* the comparator array and softmax support, which are only discussed as
  possible extensions for other aggregation functions.

The HDN cache banks are plain inferable arrays (`sram_sp`). A real chip would
use compiled SRAM macros.

## Verification

Each module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`. Each
prints `TB_RESULT checks=N failures=M`. Of note:

* `tb_control_unit` runs a six-node example graph with HDNs {0, 3, 4}. The
  adjacency rows are {0,2,3,4,5}, {1,3,4}, {0,2,5}, {0,1,3,4}, {0,1,3,4} and
  {0,2,5}. The test checks the 13 cache hits and 9 misses this graph must
  produce, the runahead and merge behaviour, and the output rows.
* `tb_grow_top` runs the whole accelerator at its default sizes against
  `tb/dram_model.sv`. The model has about 100 cycles of latency and random
  back-pressure. The test runs a combination job (with empty rows), three
  aggregation clusters with hub nodes, and a job in which every row waits on
  one shared missed row. It checks every output row against a reference
  product. It also requires that each mechanism occurred at least once: hit,
  miss, merge, return, runahead, full window, full table and empty row. It
  bounds the cycle count of the all-hit job.

To simulate with Verilator, for example the full design:

```
verilator --binary --timing --assert -Irtl -Itb rtl/grow_pkg.sv tb/tb_grow_top.sv \
          --top-module tb_grow_top -o sim && ./obj_dir/sim
```

Each other testbench is built the same way, with its own name in place of
`tb_grow_top`.
