# Falcon: a graph vector search accelerator in SystemVerilog

A graph vector search finds the k database vectors that lie closest to a
query vector. It walks a proximity graph: each node stores one vector and
links to its near neighbours. The search keeps two bounded sorted lists:

- C, the *candidates*: nodes whose neighbours have not yet been looked at;
- R, the *results*: the best nodes found so far.

The search starts at a fixed entry node. It repeatedly takes the best
candidate, fetches the neighbour list of that node, filters out nodes
already visited, fetches the vectors of the rest and computes their
distances to the query. Every scored node goes into both C and R. The
search ends when no candidate is closer than the worst entry of R. Each
step is a chain of dependent DRAM reads with only a handful of distance
computations, so a plain best-first search leaves most of the memory
bandwidth idle.

This RTL implements an accelerator for that search. It has two ideas:

1. **A dataflow pipeline.** Hardware units are chained by FIFOs:
   - a neighbour-list fetcher;
   - a Bloom filter for the visited set;
   - a vector fetcher with many reads in flight;
   - a distance unit;
   - two systolic priority queues.

   There are one or more of each, one per DDR channel.
2. **Delayed-synchronization traversal (DST).** Several *groups* of
   candidates are in flight at once, at most `mg` groups of up to `mc`
   candidates each. The controller does not wait for all outstanding work
   before choosing the next candidates. When the *oldest* group is done, it
   briefly pauses queue insertion while the queues sort. This pause is the
   synchronisation. It then launches new groups up to the limit, while the
   younger groups keep the fetch and compute units busy.
   - `mg = mc = 1` is best-first search (BFS).
   - `mg = 1, mc > 1` is multi-candidate search (MCS).

## Block diagram

```
             q_* (query vector lines)            res_* (k results per query)
                 |                                      ^
           query_router                           result_merger
                 |                                      |
   +-------------+--------- N_QPP x qpp ----------------+------------+
   |  dst_ctrl: candidate queue C, result queue R (systolic_pq),     |
   |            group bookkeeping, DST state machine                 |
   |     | candidates (FIFO)                ^ scored nodes / drops   |
   |  neighbor_fetch --- neighbour IDs ---> dispatch id % N_BFC      |
   |     |                                   |                       |
   |     |            N_BFC x bfc_unit: bloom_filter -> vector_fetch |
   |     |                              -> dist_compute -> FIFO      |
   +-----|-----------------------------------|-----------------------+
         |   read requests / tagged responses|
         +------------------ mem_xbar -------+
                               |
                 ch_req_* / ch_rsp_*  x N_CH  (to DDR controllers)
```

`falcon_top` has two useful parameter sets:

| variant | `N_QPP` | `N_BFC` | use |
|---|---|---|---|
| intra-query (default) | 1 | 4 | one query at a time uses all four channels; lowest latency |
| across-query | 4 | 1 | four independent queries; higher throughput for batches |

The network stack that delivers queries and the DDR4 controllers are not
part of the RTL. The query and result streams, and one tagged line-read
port per channel, are top-level ports.

## Data layout in memory

Every node lives in one channel, chosen round-robin by ID: node `n` is in
channel `n % N_CH`, at local index `n / N_CH`. A channel holds two regions,
and each region's base is a top-level input.

- **Adjacency records**, at `adj_base + (n / N_CH) * 5` (64-byte line
  addresses). A record is 5 lines.
  - Word 0 of line 0 is the degree.
  - 32-bit words 1..degree hold the neighbour IDs.
  - A degree above 64 is clamped to 64.
- **Vectors**, at `vec_base + (n / N_CH) * vec_lines`. A vector is
  `vec_lines` lines of 32 signed 16-bit elements each. For dimension 128
  that is 4 lines; up to 128 dimensions are supported.

The query vector enters in the same line format, and the last line is
marked. Distances are 48-bit unsigned numbers, where smaller means closer.
L2 is the exact squared distance. Inner product is reported as
`2^47 - <q,x>`, so both metrics sort the same way.

## The units

**systolic_pq.** 64 registers joined by 63 compare-swap cells.
- The even and odd pairs alternate every cycle, so the array sorts itself
  63 cycles after the last change.
- A new entry overwrites the tail, and only if it is closer than the tail.
  A full queue therefore drops its worst element, which bounds C and R.
- Insertion is accepted once every two cycles, in the phase just before the
  last pair compares. Each new element starts its own bubble pass, and two
  passes never collide.
- The head can be popped (a one-place shift) only while the queue is sorted.

**murmur2_hash / bloom_filter.**
- Three 4-stage MurmurHash2 pipelines run in parallel with different seeds.
- The 256-Kbit bitmap is split into three banks, one per hash. Each bank is
  341 words of 256 bits, so every bank does one read-modify-write per cycle
  and the filter takes one ID per cycle.
- Hash `h` selects bit `(h * BANK_BITS) >> 32` of its bank.
- A node is *visited* when all three bits were already set. Its bits are set
  in the same cycle.
- The bitmap is cleared by a 341-cycle sweep after reset and after every
  query.

**mem_reader / neighbor_fetch / vector_fetch.** A read engine turns "read L
lines at address A of channel c" into one request per cycle.
- Up to 64 reads are in flight.
- A 64-slot reorder buffer puts out-of-order responses back in request
  order. The slot number travels with the request.
- A new job starts in the same cycle the previous job issues its last
  request. Back-to-back jobs therefore keep one line per cycle.
- The neighbour fetcher unpacks a record into one neighbour ID per cycle. It
  reports the degree as soon as the first line arrives.

**dist_compute.** Takes one line per cycle, matching one fetch unit.
- It has 32 parallel multipliers (difference squared, or product), an adder
  tree and an accumulator over the lines of a vector.
- The result leaves 3 cycles after the last line.

**bfc_unit.** Chains the Bloom filter, an 8-entry FIFO, the vector fetcher,
the distance unit and an output FIFO.
- A visited node is not fetched. It is reported as a *drop* tagged with its
  group.

**dst_ctrl.** This is where the traversal lives, and it is the least
obvious part of the design.
- Group slots form a ring of `MG_MAX + 1` entries. Slot 0 is used for the
  entry node at the start of a query.
- Each slot keeps two signed counters:
  - `pcand`: candidates whose degree is not yet known;
  - `pitem`: neighbours that are neither scored nor dropped.
- Counter updates:
  - popping a candidate adds 1 to `pcand`;
  - a degree report subtracts 1 from `pcand` and adds the degree to `pitem`;
  - each drop or queue insertion subtracts 1 from `pitem`.
- A slot is complete when it is closed and both counters are zero. The
  counters are signed because a neighbour can, in principle, be counted
  before its candidate's degree report.
- State machine: `IDLE -> SEED -> RUN -> SYNC -> FILL -> (RUN | OUTPUT)
  -> FLUSH -> IDLE`.
  - **RUN** inserts scored nodes, round-robin over the BFC units, until the
    oldest group is complete, then retires it.
  - **SYNC** holds insertion until both queues are sorted. Scored nodes wait
    in the BFC output FIFOs meanwhile; fetch and compute keep running.
  - **FILL** pops up to `mc` candidates per group, all no farther than the
    worst entry of R, while fewer than `mg` groups are in flight.
  - **OUTPUT** is reached when no group is in flight and no candidate
    qualifies. It sends the first `k` entries of R, nearest first, with
    query id and rank.
- Statistics counters record groups launched, synchronisations, insertions,
  drops, cycles with scored nodes held back, and cycles with more than one
  group in flight.

**qpp.** Holds one query vector.
- It sends popped candidates through a FIFO to the neighbour fetcher.
- It dispatches each neighbour ID to BFC unit `id % N_BFC`. With four units
  and four channels, unit b handles exactly the nodes of channel b.

**mem_xbar.** Connects the requesters to the channels.
- A round-robin arbiter per channel forwards one request per cycle. The
  request carries the tag `{requester, slot}`.
- A round-robin arbiter per requester returns one response per cycle, and
  back-pressures the channels it does not pick.

**query_router / result_merger.** Used in the across-query variant.
- The router gives each new query to the lowest-numbered free pipeline,
  through a one-beat register.
- The merger passes each pipeline's result list on whole, round-robin among
  the pipelines.

## Where this RTL departs from the published design, or fills gaps

- **Arithmetic.** Vector elements are 16-bit signed integers and the
  datapath has no floating point. 8-bit datasets such as SIFT (uint8) and
  SPACEV (int8) fit exactly. Float32 data such as Deep must be quantised
  first.
- **Metrics.** Cosine similarity is not built: it needs per-vector norms
  and a division. With normalised vectors, the inner-product mode gives the
  same ranking.
- **Entry node.** It is scored through a BFC unit, as group 0, instead of
  being placed in C and R directly. This also marks it visited.
- **No qualifying candidate.** When filling finds no qualifying candidate,
  it stops rather than looping.
- **Invented details.** Everything the published description leaves open
  was chosen here:
  - record formats;
  - the Bloom bank organisation and bit mapping;
  - how the filter is cleared;
  - FIFO depths;
  - the pipeline depths of the hash (4) and distance (3) units;
  - reorder buffers;
  - the channel port protocol;
  - the router and merger policies;
  - the end-of-query result format.
- **Fixed bounds.** `MG_MAX = MC_MAX = 10` are fixed upper bounds. The run-time
  inputs `mg` and `mc` are clamped to 1..10. The published best settings
  are mg=6, mc=2 for intra-query and mg=4, mc=1 for across-query.
- **Channel interface.** The DDR4 controllers are not included. A channel is
  modelled as a tagged read port with valid/ready.
- **Reset.** A single clock with a synchronous active-low reset.
- **Lint warnings that remain.** Verilator `-Wall` reports some unused
  package constants, the unused tail outputs of the candidate queue, and the
  unused id field of the result queue's tail.

## Sizes

The defaults are the full published configuration:
- queues of 64 entries;
- a 256-Kbit Bloom filter with three hashes per BFC unit;
- 64 reads in flight per fetch unit;
- maximum degree 64;
- four channels and four BFC units.

Yosys keeps the Bloom banks and reorder buffers as memories.

Graphs of 10 million nodes with up to 128 dimensions take 576 bytes per node
in this layout (4 vector lines and 5 adjacency lines). That is about 5.8 GB in
total, 1.44 GB per channel. IDs and line addresses are 32-bit.

## Verification

Every unit has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `tb_systolic_pq` | exact sorted contents against a model; one insertion per 2 cycles; `sorted` exactly SIZE-1 cycles after the last insertion; bounded drop of the worst; pop order; flush |
| `tb_murmur2_hash` | against a software MurmurHash2; pipeline latency; stalls |
| `tb_bloom_filter` | against an exact model of the same bit mapping; visited / new verdicts; latency; clear |
| `tb_neighbor_fetch` | degree reports, clamping, ID order; one ID per cycle; out-of-order memory |
| `tb_vector_fetch` | line data and order; one line per cycle; exactly 64 reads in flight at long latency |
| `tb_dist_compute` | L2 and inner product against software; one line per cycle; 3-cycle latency; back-pressure |
| `tb_bfc_unit` | drops versus scored nodes; exact distances; clear between rounds; one line per cycle |
| `tb_dst_ctrl` | with a software model of the rest of the pipeline: BFS results equal a software bounded best-first search; DST and MCS results equal the k best nodes scored; groups in flight never exceed mg |
| `tb_mem_xbar` | routing, tags and data through four channel models; aggregate rate; round-robin fairness |
| `tb_query_router`, `tb_result_merger` | query/packet integrity, no interleaving, rate |
| `tb_falcon_top` | the whole default design (no parameter overrides), described below |
| `tb_falcon_across` | the across-query variant, described below |

`tb_falcon_top` builds a 2048-node grid graph with 128-dimensional vectors
in four DDR channel models. The models have 40-cycle latency and refuse 10%
of requests. The testbench then runs nine L2 and inner-product queries with
several (mg, mc) settings.
- BFS queries must match a software search exactly.
- The other settings must reach recall@10 of at least 0.8 against brute
  force.
- It fails if any of these mechanisms never occurred: Bloom drops,
  synchronisations, held insertions, overlapping groups, queue overflow,
  channel back-pressure, or deep read pipelining.

`tb_falcon_across` streams 16 queries into four pipelines and checks
concurrency, whole result packets and out-of-order completion.

In `tb_falcon_top`, DST with mg=6, mc=2 finishes in about a third of the
cycles of BFS.

Behavioural models used only by the testbenches:
- `ddr_channel_model`: a fixed-latency tagged channel with optional random
  stalls;
- `read_port_model`: an out-of-order memory behind one requester port.

To simulate one testbench with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/falcon_pkg.sv tb/falcon_tb_pkg.sv \
    $(ls rtl/*.sv | grep -v falcon_pkg) tb/ddr_channel_model.sv tb/read_port_model.sv tb/tb_falcon_top.sv \
    --top-module tb_falcon_top -o sim && ./obj_dir/sim
```
