# Near-memory graph ANN search on CXL memory devices

Retrieval for LLM pipelines needs approximate nearest-neighbour search (ANNS)
over billions of vectors. The index is too large for host DRAM. On SSDs the
accesses are too fine-grained, and distance computation is limited by memory
bandwidth. This design puts the whole search inside CXL memory expanders:

* Each device runs the graph search for a query on its own. It walks the
  graph, keeps the candidate list, and returns only its local top-k to the
  host.
* Distances are computed beside the DRAM ranks. Every vector is split
  column-wise over the ranks of a channel. Each rank computes the partial
  distance over the 64-byte segments it holds, and only these partial sums
  leave the rank.
* Clusters of the index are spread over the devices so that clusters close to
  each other sit on different devices. A query that probes several
  neighbouring clusters then keeps several devices busy at once.

This RTL follows the Cosmos architecture (Ko et al., "Cosmos: A CXL-Based Full
In-Memory System for Approximate Nearest Neighbor Search"). In the original, a
programmable general-purpose core inside each CXL controller runs the search
procedure. Here that procedure is a fixed state machine. Everything that the
architecture leaves open is decided in this design, and the decisions are
listed below. Examples are the register map, the graph record format and how
segments map to ranks.

## System organisation

```
 host ── CXL switch ──┬── device 0 ─┬─ iface_regs   (host-mapped registers, query + result buffers)
   (not built)        │             ├─ anns_engine  (search sequencer)
                      │             │    ├─ cand_list   sorted candidate list
                      │             │    ├─ temp_buffer current node's neighbour list
                      │             │    └─ addr_gen    base + index * stride
                      │             └─ dist_array   4 channels x 2 ranks of rank_pu
                      │                              └─ dist_calc (64 byte lanes)
                      ├── device 1 ...
                      ├── device 2 ...
                      └── device 3 ...
```

`cosmos_system` (the top) holds `N_DEV` = 4 `cosmos_device` instances. The
defaults match the evaluated system: 4 devices, each with 4 DDR5 channels of 2
ranks (256 GB per device, 1 TB in all). Several parts are not logic in this
design: the host, the switch, the PCIe/CXL PHY, the CXL controller IP, the DDR5
memory controllers and the DRAM. In their place the top has these ports:

| port group | per | meaning |
|---|---|---|
| `host_we/re/addr/wdata/rdata/rvalid` | device | 64-bit load/store into the device's mapped registers; read data one cycle after `host_re` |
| `gr_req_valid/ready/addr`, `gr_rsp_valid/data` | device | reads of graph records, 64-byte beats, one request outstanding |
| `rank_req_valid/ready/addr`, `rank_rsp_valid/data` | rank | reads of vector segments from one rank, 64-byte beats, in-order responses; index `dev*8 + ch*2 + rank` |
| `stat_stall`, `stat_skip` | device | counters: cycles the sequencer waited for a busy channel, neighbours skipped because they were already listed |

The devices never talk to each other. The host merges their lists.

## Rank-parallel distance computation

This is the part of the design that most differs from a conventional
accelerator.

**Layout.** Vectors are stored as `num_seg` segments of 64 bytes. Two rules
place them:

* Vector `v` lives in channel `v mod N_CH`.
* Inside that channel, segment `s` lives in rank `s mod N_RANK`, at byte address
  `emb_base + v * vector_stride + (s div N_RANK) * 64`.

`vector_stride` is therefore the size of one rank's share of a vector, not of
the whole vector. A 128-byte SIFT vector puts one segment in each of the two
ranks. A 384-byte vector puts three in each. The address formula
`base + index * stride` is the architecture's. The interleaving over channels
and ranks is this design's choice. The formula is applied with the global
vector index, so each rank uses only a quarter of the address span it covers.
This costs address space, not capacity.

**rank_pu.** Each rank has one processing unit. The search starts with the
query broadcast to all units, one segment per cycle. Each unit keeps only its
own segments, in `qstore`. A distance job carries the vector's address and
segment count. The unit reads its segments one request per cycle and sends
each returned beat through `dist_calc` together with the matching query
segment. It accumulates the results and then pulses `done` with its partial
sum. A unit that holds no segment of the vector (for example, rank 1 when
`num_seg` = 1) finishes with 0.

**dist_calc.** This block has 64 byte lanes. Each lane widens its two bytes
to 9-bit signed values: zero-extended for uint8, sign-extended for int8.
* L2: each lane subtracts and squares.
* Inner product: each lane multiplies.

An adder tree sums the lanes into one registered result, one cycle after the
input. The inner product is returned **negated**. That way "smaller is nearer"
holds for both metrics and the candidate list needs only one comparison.
**fp32 is not computed.** An fp32 configuration gives 0 and raises `unsup`,
which shows up as `STATUS.error`.

**dist_array.** A job for node `id` goes to channel `id mod N_CH`. Both ranks
of that channel start together. A per-channel adder sums the partials as they
arrive, and the channel result is ready one cycle after the slower rank.
Each channel takes one job at a time. A job for a busy channel stalls the
sequencer, and `stat_stall` counts these cycles. Channels are independent, so
up to `N_CH` distances are in flight. Finished channels are drained through a
round-robin arbiter.

## The search procedure (`anns_engine`)

One search handles one query against one graph, usually one cluster's graph,
starting from a given entry node:

1. **Query load.** `num_seg` cycles broadcast the query from the data buffer
   to every `rank_pu`.
2. **Entry.** One distance job is issued for the entry node.
3. **Select.** When all jobs are back, the nearest *unvisited* node of the
   candidate list is marked visited and becomes the current node. If there is
   none, the list has converged and the search goes to step 6.
4. **Graph read.** The node's record is read from
   `graph_base + node * node_stride` in 64-byte beats into `temp_buffer`.
   A record is a list of 32-bit words: word 0 is the degree and words
   1..degree are neighbour ids. A degree above `MAX_DEG` is cut to `MAX_DEG`.
5. **Expand.** Neighbours are taken from the buffer one at a time, two cycles
   each. A neighbour already in the candidate list is skipped (`stat_skip`).
   Every other neighbour gets a distance job. Results are inserted into the
   candidate list in any order as they return. Then the search goes back to
   step 3.
6. **Results.** The first `k` list entries are written to the result buffer,
   one per cycle. Missing entries read id `0xFFFFFFFF` and distance
   `0x7FFFFFFF`. Then `done` pulses.

**Candidate list (`cand_list`).** The list keeps up to `L` (cand_list_len)
entries sorted by distance. All comparisons happen in parallel. The rules:

* A new node goes *after* all entries with an equal or smaller distance.
* If the list is full, the last entry drops out.
* A node that would land at position `L` or beyond is rejected.
* A node already in the list is ignored.

Once the list is full, its worst distance never increases. A node that has
dropped out therefore cannot come back, so checking against the list alone is
enough to stop the search from looping. No separate visited set is kept.
When `L` is at least the number of nodes reachable from the entry, the search
visits all of them, and the top-k is exact for that graph. The testbenches
rely on this.

## Host interface (`iface_regs`)

The registers are 64-bit words, addressed by word:

| addr | name | content |
|---|---|---|
| 0x000 | CTRL | write bit0 = 1: start (ignored while busy) |
| 0x001 | STATUS | bit0 busy, bit1 done (held until the next start), bit2 error (fp32 requested) |
| 0x002 | GRAPH_BASE | byte address of node record 0 |
| 0x003 | NODE_STRIDE | bytes per node record (multiple of 64) |
| 0x004 | EMB_BASE | byte address of vector 0 in each rank |
| 0x005 | VEC_STRIDE | bytes per vector per rank |
| 0x006 | ENTRY | entry node id |
| 0x007 | CONFIG | [7:0] segments per vector, [15:8] k, [23:16] L (0 or > L_MAX means L_MAX), [25:24] metric (0 L2, 1 IP), [27:26] element type (0 uint8, 1 int8, 2 fp32) |
| 0x008 | STATS | [31:0] distance jobs, [63:32] nodes expanded (last search) |
| 0x100 + 8s + w | QUERY | query bytes 8w..8w+7 of segment s, little-endian |
| 0x200 + i | RESULT | entry i: [31:0] id, [63:32] distance (signed, IP negated) |

Writes to configuration and query registers are ignored while a search
runs. A typical host sequence is:

1. Write the metadata, `ENTRY`, `CONFIG` and the query.
2. Write `CTRL` = 1.
3. Poll `STATUS` until bit1 (done) is set.
4. Read `k` results from `RESULT`.

## Cluster placement and query dispatch (host side)

The host splits the index into clusters. It places them once, before any
search, sorted from largest to smallest. Each cluster goes to a device as
follows:

* Only devices with enough room left are candidates.
* For each candidate, the loss adds `N_DEV - i` for every already-placed
  cluster on it that is the cluster's i-th nearest neighbour.
* The lowest loss wins. On a tie, the device with more room left wins.

At query time the host picks the `num_probes` clusters with the nearest
centroids. It starts one search per cluster on the device that holds it, and a
device with two probes runs them one after the other. The host then merges the
local top-k lists. This is host software, not hardware. `tb/cosmos_system_tb.sv`
contains a direct implementation (`place_clusters`), together with round-robin
placement for comparison.

## Parameters

| parameter | default | where | origin |
|---|---|---|---|
| `N_DEV` | 4 | system | evaluated system |
| `N_CH` | 4 | device, dist_array | evaluated system (4 DDR5 channels) |
| `N_RANK` | 2 | device, dist_array, rank_pu | evaluated system (2 ranks per channel) |
| `SEG_BYTES` | 64 | package | architecture (64 B sub-vector segments) |
| `MAX_SEG` | 16 | device, rank_pu, iface_regs | own: 1024-byte vectors, enough for 200-dim fp32 |
| `L_MAX` | 64 | cand_list | own (cand_list_len not given) |
| `MAX_DEG` | 64 | anns_engine | own (max_degree not given) |
| `K_MAX` | 16 | iface_regs | own (k = 10 is the usual benchmark setting) |
| `ID_W`, `DIST_W`, `ADDR_W` | 32, 32, 40 | package | own |

Most of the storage at the defaults is in the candidate lists (64 entries of
id, distance and visited bit, each entry with its own comparator) and in the
query stores of the 32 rank units (8 segments of 512 bits each).

## Where this design departs from or goes beyond the architecture

* **No programmable core.** The search procedure is built as hardware. The
  original runs it as software, so it can change algorithms without a
  redesign. Here, changing the algorithm means changing `anns_engine`.
* **No fp32.** The DEEP1B dataset (fp32, 96 dims), one of the two evaluated
  datasets, cannot be searched. Its vectors fit (6 segments), but the lanes
  are 8-bit integer only. uint8 (SIFT) and int8 (MSSPACEV) are supported.
* **Memory system abstracted.** There is no DDR5 controller, timing or
  refresh. Ranks and graph memory are valid/ready read ports. The rank unit
  sits "at the rank" only in the sense that it owns that rank's read port.
* **Own choices throughout:**
  * the channel and rank interleaving;
  * the graph record format;
  * de-duplication against the candidate list only;
  * one job per channel;
  * two cycles per examined neighbour;
  * one outstanding graph read;
  * the negated inner product;
  * the register map.
* **Throughput not modelled.** No attempt is made to match the reported
  speed-ups. Those come from a simulator with DRAM timing, not from this RTL.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. DRAM contents are
never stored. A byte at address `a` of rank `r` is a hash of `(r, a)`
(`tb_pkg::mem_byte`). A graph record is generated from the node id: clusters
of `CS` nodes, where node `n` has degree `D - (n mod 3)` and its k-th
neighbour is `(n + 1 + 7k mod (CS-1)) mod CS` within the cluster. The
reference distances are computed in the testbench from the same functions.
`mem_port_model` serves both kinds of port, with a configurable latency and
random back-pressure.

| testbench | what it establishes |
|---|---|
| `dist_calc_tb` | L2 and IP for uint8 and int8 against byte-wise sums; corner values; one result per cycle at latency 1; fp32 flag |
| `rank_pu_tb` | rank 1 of 2 keeps only odd segments; read addresses; partial sums; empty job |
| `dist_array_tb` | 300 random jobs under back-pressure; full distances; stalls and 4 channels in flight |
| `addr_gen_tb` | both address formulas, 40-bit wrap |
| `cand_list_tb` | every operation against a queue model for L = 8, 20, 64; dup, drop, evict, convergence |
| `temp_buffer_tb` | read-after-write, 1-cycle read |
| `iface_regs_tb` | register decode and read-back, query buffer, start/busy/done/error, results |
| `anns_engine_tb` | whole procedure against an out-of-order distance model; each distance requested once; exact top-10 |
| `cosmos_device_tb` | host-driven searches: uint8/L2 and int8/IP exact against brute force, short L, fp32 error |
| `cosmos_system_tb` | 4 devices at default parameters: placement, parallel multi-probe queries, host merge exact against brute force; requires parallel devices, back-to-back probes, stalls, skips, evictions and multi-beat records to occur |

Run a testbench with plain Verilator, from the folder that holds `rtl/` and
`tb/`. The two packages go first. For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/cosmos_pkg.sv tb/tb_pkg.sv \
  rtl/dist_calc.sv rtl/rank_pu.sv rtl/dist_array.sv rtl/addr_gen.sv \
  rtl/cand_list.sv rtl/temp_buffer.sv rtl/iface_regs.sv rtl/anns_engine.sv \
  rtl/cosmos_device.sv rtl/cosmos_system.sv \
  tb/mem_port_model.sv tb/cosmos_system_tb.sv --top-module cosmos_system_tb
./obj_dir/Vcosmos_system_tb
```

Swap the last testbench file and `--top-module` for any other testbench.
`cosmos_system_tb` builds the full-size system in under a minute and runs
in about a second.

The system testbench also compares the two placements. Both take the
clusters in the same size order, and round-robin simply deals them out.
For a query aimed at each of the 16 clusters, the testbench counts how
many searches the busiest device must run one after the other, and adds
these up. The results at the defaults:

| probes per query | adjacency-aware | round-robin | ideal |
|---|---|---|---|
| 4 | 27 | 32 | 16 |
| 8 | 48 | 34 | 32 |
| 16 | 80 | 64 | 64 |

The testbench requires adjacency-aware placement to be no worse at 4 probes
and only prints the other rows. At 8 and 16 probes it loses. The placement
rule checks only remaining capacity, and each device here has 1.3 times its
fair share. So the rule can put 5 of the 16 clusters on one device when
round-robin puts 4 on each. Once a query probes most clusters, the cluster
count per device decides the load, and adjacency hardly matters. The
clusters in this test lie on a ring. These numbers show how the placement
rule behaves. They do not reproduce a measurement on real data.
