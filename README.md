# HNSW search accelerator for computational storage

Approximate nearest-neighbour search over a billion vectors does not fit in the memory
next to an FPGA. This design handles that case. The dataset is cut into sub-graphs, and
each sub-graph is a separate HNSW (Hierarchical Navigable Small World) graph of at most
5 million points, small enough for the 4 GB of DRAM on a SmartSSD-class card. The host
loads one sub-graph at a time from the card's flash into DRAM, and then starts the
accelerator.

For every query of the batch, the accelerator searches the sub-graph in DRAM and finds
the K = 10 nearest points, with a search width of ef = 40. It then merges these with the
best K points found in the earlier sub-graphs, so after the last sub-graph the result
area in DRAM holds the final K neighbours of each query.

The RTL covers everything between the DRAM's AXI ports and the result area:
- the memory access DMAs;
- two search engines ("computing modules");
- the cross-sub-graph merge.

The flash, the PCIe peer-to-peer transfer, the DDR controller and the host software are
outside it.

## The search being accelerated

An HNSW graph has layers. Layer 0 holds every point, and each layer above holds a random
subset of the one below it. A query starts at a fixed entering point on the top layer.

**Upper layers.** On each upper layer the search is greedy. It reads the neighbour list
of the current point and computes the distance from the query to every neighbour. If one
of them is closer than the current point, it moves there and repeats. If none is closer,
it drops one layer and keeps the same point.

**Layer 0.** On layer 0 the search is a best-first search that uses three structures:
- a *visited list*, with one bit per point;
- a *candidate list*, sorted by distance, from which the next point to expand is the
  nearest;
- a *final list* of the ef best points seen so far.

A neighbour that has not been visited and is closer than the worst entry of the final
list goes into both sorted lists. The search ends in one of two cases:
- the candidate list is empty;
- its best entry is farther than the worst entry of the final list.

The first K entries of the final list are the answer for this sub-graph.

Distances are squared Euclidean distances between 128-dimensional vectors of unsigned
bytes, for example SIFT descriptors. The square root is never taken, because it does not
change the order.

## Database layout in DRAM

The graph is stored as four tables with aligned rows, so that every access is a single
aligned AXI burst:

| table | row | contents |
|---|---|---|
| index table | 64 B per point | one 32-bit word per layer: `size[31:26]`, `pointer[25:0]` |
| layer-0 list table | 128 B (two 512-bit beats) | up to maxM0 = 32 neighbour indices, 32 bits each |
| upper list table | 64 B (one 512-bit beat) | up to maxM = 16 neighbour indices |
| raw data table | 128 B | the 128-byte vector of each point |

**Index table.** A point's index-table word for layer L sits at
`index_base + idx*64 + L*4`. Its pointer is a row number in the list table of that layer.

**Upper list table.** The rows of this table are stored top layer first. So the lists of
layers 6 down to 3, which every query passes through, are the first `cached_rows` rows.
Once per start, each computing module copies those rows into an on-chip list cache (2048
rows of 512 bits by default). Upper-layer lookups with a pointer below `cached_rows` then
never touch DRAM.

**Configuration record.** The search parameters form a 512-bit record at `param_addr`,
laid out as `hnsw_pkg::config_t`. They are:
- the top layer and the entering point;
- ef, the number of queries and the number of cached rows;
- the base address of each table, of the queries and of the results;
- the global index of the sub-graph's first point;
- a first-sub-graph flag.

**Queries and results.** The queries are 128-byte rows at `query_base`. The results are
K 64-bit words `{distance, global index}` per query at `result_base + qid*K*8`, nearest
first. An unused slot is written as all ones.

## Block structure

```
                  +--------------------- memory access module ---------------------+
 AXI 256  <------ | param_dma  -> configuration registers                            |
 AXI 1024 <------ | query_dma  -> query FIFO (one per computing module)              |
 AXI 32   <------ | index_table_dma -.                                              |
 AXI 512  <------ | list_table_dma  -+-> index FIFO   (list cache for layers 6..3)  |  x2
 AXI 1024 <------ | raw_data_dma    ---> data FIFO                                  |
 AXI 64  <------> | output_dma  <--> bruteforce_searcher                            |
                  +----------------------------------------------------------------+
                   computing_module x2: distance_calculator -> distance FIFO
                                        distance_comparator (visited list,
                                        candidate list, final list)
```

Each DMA has its own AXI port. The widths are 256 bits (parameters), 1024 bits (queries
and raw vectors), 32 bits (index table), 512 bits (list table) and 64 bits (results).
Every computing module has its own index table, list table and raw data DMA, so the two
modules never wait for each other. Query q goes to module q mod 2.

### How a neighbour list flows

The comparator sends a request `(point, layer)` to the index table DMA, which returns
that point's `{size, pointer}` word. The list table DMA then takes the list from the
cache or from DRAM, reading only the beats that the size needs.

It emits the list one index per cycle to two places at once:
- the raw data DMA, which fetches the vectors with several reads in flight;
- the index FIFO, with a `last` flag on the final index.

An empty list sends a single `nil` element. The vectors go through the data FIFO into the
distance calculator, whose results enter the distance FIFO.

The comparator therefore finds, in the same order, each neighbour's index at the head of
the index FIFO and its distance at the head of the distance FIFO. It pops both together.
The distance calculator takes the query from the comparator, so it always works on the
query that is being searched.

On layer 0, every index is fetched and its distance computed, even when it will turn out
to be already visited. The list and raw DMAs run ahead of the comparator, and the visited
check is made when the pair is consumed. This keeps the memory pipeline full at the price
of some wasted vector reads.

### Distance calculator

The distance calculator has eight units. Each unit has 16 processing elements, each
computing `(q - d)^2` for one byte pair, and an adder tree. A second adder tree adds the
eight unit sums. Both trees are registered, which gives:
- a 2-cycle latency;
- one 128-dimensional distance per cycle;
- a stall of the whole pipeline while the distance FIFO is full.

### Distance comparator

The distance comparator is a state machine with these phases:
- the entering point (`S_EP_*`);
- the greedy upper-layer loop (`S_UP_*`);
- the layer-0 loop (`S_L0_*`);
- the result output (`S_OUT`).

**Upper layers.** The upper-layer loop keeps one best `{index, distance}` register. At the
end of each list, it re-requests the same layer if the best point changed, and otherwise
moves one layer down. Layer 0 starts from the final best point. That point is marked
visited and put in both lists.

**Layer 0.** For each neighbour, the loop does a check-and-set in the visited list, which
takes two cycles and returns the old bit. It then compares the distance with the worst
entry of the final list. A neighbour that passes goes into both lists in the same cycle,
and the final list drops its worst entry when it is full. After each list, the end
condition is checked. If the search goes on, the candidate minimum is popped and
requested. The `stats` port counts every kind of event.

### Visited list

The visited list holds one bit per point in 512-bit-wide rows (9,766 rows for 5 million
points) and has two banks. A new query swaps the banks. The bank that was just used is
cleared one row per cycle while the next query runs, so clearing costs nothing unless
queries are shorter than about 9,800 cycles. If they are, `query_start` waits.

### Sorted lists and the parallel sorter

The candidate list (64 entries), the final list (ef, at most 40 used) and the merge list
(K) are the same module, `sorted_list`. On an insert, `parallel_sorter` compares the new
distance with every stored distance at once. The number of stored entries that are less
than or equal to it is the insertion position, and one shift of the register array
inserts it. Pop-minimum is a shift the other way. One operation is done per cycle.

### Merging across sub-graphs

The K results of a query go to `bruteforce_searcher`. Unless this is the first
sub-graph, it first reads the query's current best K from the result area through
`output_dma`. It then inserts the new results into a K-entry sorted list, with their
indices made global by adding the sub-graph's base index, and writes the K best back.

The stored distances were computed against the same query, so comparing them is the same
as recomputing them. A round-robin arbiter between the two computing modules keeps each
query's K results together. `done` rises after the last query of the batch has been
written.

## Sizes and what they cost

At the defaults, each computing module holds:
- a visited list of 2 x 9,766 x 512 bits, which is 1.22 MB;
- a list cache of 2048 x 512 bits, which is 128 KB.

This memory dominates the design. In synthesis with the defaults, the top has about 7,800
cells and 22 Mbit of memory.

All defaults are the numbers of the published design, except for these, which it does
not give:

| parameter | default | notes |
|---|---|---|
| `POINTS` | 5,000,000 | visited-list size, which is the largest sub-graph |
| `EF` | 40 | final list depth |
| `K` | 10 | results per query |
| `NUM_CM` | 2 | computing modules |
| maxM | 16 | upper-layer list length; maxM0 = 32 |
| `CAND` | 64 | candidate list depth; not given by the paper |
| `CACHE_ROWS` | 2048 | list cache rows; not given by the paper |
| FIFO depths | | index and distance 64, data 16, query 4; not given by the paper |
| configuration record | | layout not given by the paper |
| index word | | bit layout not given by the paper |

## Departures and open points

- **Per-module DMAs.** Each computing module has its own index, list and raw data DMAs,
  where the published block diagram shows one memory access module with one DMA of each
  kind. The decoupling through FIFOs is as published.
- **Visited check after the distance.** The visited check on layer 0 happens when a
  neighbour's distance is consumed, not before its vector is fetched. So visited
  neighbours cost a vector read, but never a list update.
- **Merge without recomputation.** The cross-sub-graph merge compares stored distances
  instead of recomputing them from raw vectors. For the same query this gives the same
  result.
- **Layer limit.** The list cache is filled by row count, not by layer. Layers up to 6
  are supported (`MAX_LAYER`).
- **Host side.** Nothing is modelled of the SSD, the peer-to-peer transfer or the host.
  The host is expected to load a sub-graph, write the configuration record and pulse
  `start` once per sub-graph.

## Simulating

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`. Each one
also has a watchdog. The memory models `tb/axi_rd_slave.sv` and `tb/axi_wr_slave.sv`
serve AXI bursts from a 1 MB byte array in `tb/tb_mem_pkg.sv`, with random stalls.

For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/hnsw_pkg.sv tb/tb_mem_pkg.sv tb/tb_hnsw_accel_top.sv \
  --top-module tb_hnsw_accel_top -o sim && ./obj_dir/sim
```

### End-to-end test

`tb_hnsw_accel_top` runs the top at its default parameters. It generates the data itself:
- sub-graph A: 400 points, 6 layers, 16 cached rows;
- sub-graph B: 30 points, 3 layers.

It searches 8 queries in A, then in B, merging the results, and compares every result
against a reference search written in the testbench. It also counts each mechanism and
fails if one of them never happened:
- upper-layer moves and layer drops;
- visited hits;
- list insertions, evictions and rejections;
- both end conditions;
- cache hits;
- empty lists;
- work on both computing modules.

It takes about one second to run.

### Unit tests

These testbenches check single blocks against independent models:
- `tb_distance_calculator` checks the distance values, the 2-cycle latency and the rate
  of one result per cycle.
- `tb_sorted_list` checks the list against a queue model, including overflow.
- `tb_visited_list` checks the bitmap model and the clearing time.
- `tb_list_table_dma` checks cache against DRAM, list order and nil lists.
- `tb_index_table_dma`, `tb_raw_data_dma`, `tb_param_dma`, `tb_query_dma` and
  `tb_output_dma` check their DMAs.
- `tb_bruteforce_searcher` checks the merge against a model merge.
- `tb_computing_module` tests one computing module with the memory side played by the
  testbench. It compares the results of 10 queries on a 300-point graph with a
  reference search.
