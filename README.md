# Near-storage graph ANN search on 3D NAND

Approximate nearest-neighbour (ANN) search over large vector sets is usually
run as a walk over a proximity graph. Starting from an entry vertex, the search
repeatedly expands the most promising unvisited candidate, computes the
distance of each of its neighbours to the query, and keeps a sorted list of
the best candidates. At 100 million vectors and more, the graph and the vectors
no longer fit in DRAM. On SSDs, every expansion turns into a small, latency-bound
random read.

This design moves the search next to the storage. It has two bonded wafers:

* a **3D NAND wafer**. It is organised as 16 tiles of 32 small NAND cores. Each
  core reads one 128-byte granule of a page at a time instead of the whole
  page, with a read latency of about 300 cycles.
* a **CMOS wafer** holding the **search engine**. It has 256 independent search
  queues, and each queue runs one query. They share one product-quantisation
  (PQ) unit and one 256-point bitonic sorter.

Three ideas keep the NAND traffic small:

1. **PQ-guided traversal.** Neighbours are ranked by a cheap PQ distance. This
   distance needs only a 32-byte code per vertex. The full vectors are fetched
   only to *rerank* the few candidates that matter.
2. **Compact frames.** Neighbour lists are gap-encoded. For the most-visited
   ("hot") vertices, the frame also repeats every neighbour's PQ code, so one
   read brings in both the ids and the codes.
3. **A list that grows and stops early.** The search works on the first T
   entries of the candidate list and grows T in steps. It stops as soon as the
   top-k has not changed for r checks in a row.

All of the digital logic is written in synthesizable SystemVerilog. The NAND
cell array itself is a behavioural memory model.

## Search algorithm in one queue (`search_queue`)

The host first loads the PQ codebook and the configuration (`cfg_t` in
`proxima_pkg`). For each query it writes the D query elements and then
commits the query with an entry vertex. The steps are:

1. **Distance table.** The PQ module computes the asymmetric distance table
   (ADT). The table has 256 centroids × 32 subspaces. Each entry is the
   distance from the query's sub-vector to one centroid. The table is streamed
   row by row into the chosen queue's 16 kB ADT memory.
2. **Entry.** The queue fetches the entry vertex's PQ code and inserts the
   vertex into the empty candidate list.
3. **Expand.** The queue takes the first unevaluated candidate and marks it
   evaluated. It then fetches that candidate's neighbour frame. For each
   neighbour:
   * the Bloom filter tests and sets its id;
   * if the id is new, the queue gets its PQ code (inline from a hot frame, or
     by a separate fetch) and computes its PQ distance in M = 32 cycles;
   * the neighbour is appended to the list.
4. **Sort.** The list goes through the shared sorter and is cut to L entries.
5. **Check.** This step runs when the first T entries are all evaluated:
   * every entry not yet reranked gets its raw vector fetched and an exact
     distance computed (D cycles on one MAC);
   * the list is ordered by exact distance;
   * the top-k is compared with the previous top-k.

   If the top-k has been equal for r consecutive checks, the search ends
   (*early termination*). Otherwise T grows by T_step (*dynamic list*).
6. **Final rerank.** Every candidate whose PQ distance is below
   β · PQdist(L[T]) is reranked. β (1.06 by default) covers the PQ
   error. The k best by exact distance are returned.

The search also ends when T would exceed L.

Each queue has at most one outstanding memory request. A request waits until
the arbiter grants it.

## Distance arithmetic

All arithmetic uses FP16 (`fp16_mac` and the helpers in `proxima_pkg`):

* subnormals are flushed to zero;
* results are truncated toward zero;
* overflow saturates to the largest finite value.

Inner-product distances are stored negated, so that smaller always means
nearer. Angular search is run as inner product on normalised vectors.

**PQ module latency.** The PQ module has 32 MACs, one per subspace. It needs
exactly **24·D cycles** for a Euclidean table and **8·D cycles** for an
inner-product table:

* 256 centroids × D/32 elements per subspace;
* one MAC step per element for inner product;
* three MAC steps per element for Euclidean: subtract, square, accumulate.

**Distance unit.** The per-queue distance unit uses one MAC:

* a PQ distance is 32 table look-ups and adds, one per cycle;
* an exact distance is one element per cycle. A small subtractor ahead of the
  MAC forms q−x, so Euclidean needs no extra steps.

Truncating FP16 accumulation over 128 elements stays within about 2.5 % of the
sum of the absolute terms.

## Memory layout: where a vertex lives

The graph and the vectors are laid out so that one vertex needs few granules
and consecutive vertices spread over many cores. The rules are implemented in
`addr_translator` (for the hardware) and again, independently, in
`tb_proxima_top` (for the preload).

**Cores.** The cores are split into two groups:

* **raw cores**: cores `0 .. N_RAW_CORES-1`, holding the full vectors;
* **graph cores**: the remaining cores, holding the neighbour frames.

Within each group, vertex v goes to core `v mod N` and to slot `v div N`
(core-level round-robin).

**Pages.** Slots are packed 2^fpp_lg frames to a page:

    page = base + (slot >> fpp_lg)
    seg  = (slot mod 2^fpp_lg) * g

Here g is the frame size in 128-byte granules. `g` and `fpp_lg` are set
separately for raw vectors, normal frames and hot frames.

**Normal frame.** Fields run from the least significant bit up:

    i1 (w0 bits) | g2 .. gR (wgap bits each) | PQ(v) (256 bits)

* Neighbour ids are sorted. Each id after the first is stored as its gap to
  the previous one.
* One gap width `wgap` is used for the whole graph. About 20–26 bits is enough
  for 1M–100M vertices.
* A request for a vertex's PQ code reads only the one or two granules that
  hold `PQ(v)`. Its bit offset is `w0 + (R−1)·wgap`.

**Hot frame.** Vertices with ids below `n_hot` also have a hot frame. The
hottest vertices are renumbered to the smallest ids beforehand. The layout is:

    i1 | PQ(n1) | g2 | PQ(n2) | ... | gR | PQ(nR) | PQ(v)

Hot frames are stored from page `hot_base` on, in the same graph core. A hot
vertex's neighbours therefore need no PQ fetch at all.

`gap_decoder` walks the frame in the queue's frame buffer. It emits ids and
inline PQ codes one field at a time, with a valid/ready handshake.

## NAND core and its timing (`nand_core`, `nand_array`)

A read names a page, a first segment and a segment count:

* The word line is set up.
* For each segment, a 32:1 bit-line multiplexer selects 1024 of the 32768 bit
  lines. Only those lines are precharged and sensed into the page buffer.
* The segment is streamed over a 16-bit port, 64 beats per segment.

Timing at the default parameters:

| event | cycles |
|---|---|
| request to first beat | T_READ + 1 = 301 (the read latency of about 300 ns at 1 GHz) |
| last beat of a segment to first beat of the next | T_SEG + 1 = 101 (word line already set up) |
| one segment on the I/O port | 64 beats, one per cycle while `io_ready` is high |

A core is `busy` from request to last beat. The arbiter never sends a request
to a busy core. Instead that request *stalls*, and the round-robin pointer
moves on to the other queues.

## Interconnect

* `htree_bus` is a pipelined H-tree with one register stage per tree level, so
  a message crosses it in log2 N cycles each way.
  * Requests are routed down by destination.
  * Responses from the children are merged upward round-robin.
* Tiles and cores each use one H-tree: 16 tiles on the tile bus, 32 cores per
  tile on the core bus.
* A tile (`tile`) collects a core's 64 beats into one 1024-bit granule before
  sending it up.
* The arbiter routes each granule to its queue by the request's tag.

## Other shared units

* **Scheduler.** The scheduler keeps one busy bit per queue. It reserves the
  next idle queue round-robin, first come first served, one query ahead.
* **Bitonic sorter.** The 256-point sorter is pipelined into
  2·log2 256 = 16 stages:
  * it accepts one list per cycle;
  * its output is the slot permutation, tagged with the queue id;
  * queues get access to it round-robin.
* **Candidate list.** The candidate list holds 256 entries of 64 bits (2 kB).
  Each entry has:
  * a 30-bit id;
  * an FP16 PQ distance;
  * an FP16 exact distance;
  * an evaluated flag and a reranked flag.

  New neighbours are appended after the valid entries. When all 256 slots are
  full, the queue sorts and cuts the list early (*overflow flush*).
* **Bloom filter.** The Bloom filter has 12 kB in 8 banks with one hash each
  (multiply–shift hashing):
  * test-and-set takes one cycle;
  * clearing takes 192 cycles and is done for every new query.

## Sizes

Unless noted below, the default parameters are the paper-level sizes:

* 256 queues;
* 16 tiles × 32 cores;
* a 256-entry list and sorter;
* a 64 kB codebook;
* M = 32, C = 256;
* T_READ = 300.

Departures from those sizes:

* **NAND capacity.** Each core has `PAGES = 16` pages instead of 24576. At full
  capacity the simulated array would be 48 GiB of state. The built capacity is
  512 cores × 16 pages × 4 kB = 32 MiB.
  * None of the evaluated data sets fits in 32 MiB: SIFT-1M / GLOVE-1M,
    DEEP/BIGANN-10M, DEEP/BIGANN-100M.
  * With FP16 vectors and 256-byte frames, every one of them except a billion
    vectors would fit the full 54 GB chip. BIGANN-100M needs about 48 GiB.
  * Functionally, the RTL supports D ≤ 128, R ≤ 64 and ids up to 2^30.
* **Page width.** A page has 32768 bit lines. This value divided by the 32:1
  multiplexer gives the 128-byte granule. The cell-array table of the source
  design lists 36864 bit lines per page instead; that figure is not used here.
* **Frames per page.** The number of frames per page is rounded down to a
  power of two, so that locating a slot is a shift. The densest packing would
  be floor(32768 / frame bits). The price is up to half a page of unused space
  for some frame sizes.
* **Neighbour padding.** Vertices with fewer than R neighbours are padded to R
  with zero gaps. A zero gap repeats the previous id, and the Bloom filter
  then drops it.
* **Raw/graph core split.** The split of cores between raw vectors and graph
  frames is 256/256. This is a choice of this design.

Choices of this design that the source leaves open:

* the FP16 rounding rules;
* the hash functions;
* the entry and frame bit layouts;
* T_SEG, the initial T and KMAX = 16;
* the bus protocols;
* one outstanding request per queue;
* the host load protocol;
* the event counters.

Each module's opening comment says which of its parts follow the source and
which are choices.

Parts with no RTL here:

* **Host I/O interface.** It is reduced to plain ports on `proxima_top`.
* **High-voltage switches and word-line drivers.** These are analog circuits.
* **Wafer bonding.** It has no logic function.

## Simulating

Every testbench checks itself and prints
`TB_RESULT checks=<n> failures=<n>`. To build and run one with Verilator 5,
compile the package files first:

    verilator --binary --timing --assert -Wno-fatal \
      rtl/proxima_pkg.sv tb/tb_util_pkg.sv $(ls rtl/*.sv | grep -v proxima_pkg) \
      tb/tb_pq_module.sv --top-module tb_pq_module -o sim
    ./obj_dir/sim

| testbench | what it checks |
|---|---|
| `tb_fp16_mac` | add/sub/mul/mac against real arithmetic |
| `tb_pq_module` | every ADT entry; latency 24·D (L2) and 8·D (IP) |
| `tb_dist_unit` | PQ and exact distances; latency M and D cycles |
| `tb_bloom_filter` | no false negatives, low false-positive rate, clear |
| `tb_candidate_list` | all list operations against a model |
| `tb_bitonic_sorter` | sorted order, permutation, latency 16 |
| `tb_gap_decoder` | normal frames (R = 64), hot frames, PQ and raw windows |
| `tb_addr_translator` | the layout rules above against a model |
| `tb_scheduler` | round-robin FCFS allocation |
| `tb_htree_bus` | routing, merging, latency log2 N |
| `tb_nand_core` | data, 301 / 101 cycle timing, busy |
| `tb_tile` | tile routing and granule assembly |
| `tb_arbiter` | grants, stalls on busy cores, translation, response routing |
| `tb_proxima_top` | end-to-end search |

**End-to-end test.** `tb_proxima_top` runs whole searches. It is the largest
configuration simulated:

* 4 queues;
* 2 tiles × 4 cores (4 raw, 4 graph);
* a 32-slot candidate list;
* shortened NAND timing: T_READ = 20, T_SEG = 4;
* 64 vectors of D = 32;
* 12 queries.

The checks are:

* the results are valid, distinct ids;
* their distances are ascending and match the exact distances;
* recall is at least 0.75 against brute force;
* each counted mechanism happened at least once: arbiter stall, list overflow
  flush, early termination, dynamic-list growth, hot-frame fetch, Bloom-filter
  skip, rerank and sort.

No simulation was run at the full default size. Its C++ model is too large to
build in useful time.

To change the configuration, override the parameters of `proxima_top`. The
layout fields in `cfg_t` must match the data that is preloaded through the
`prog_*` port.
