# ScalaBFS-style breadth-first search accelerator in SystemVerilog

This design computes breadth-first search (BFS) levels on a large directed
graph. The graph's edges stay in off-chip High Bandwidth Memory (HBM), and all
per-vertex state stays on chip. HBM is split into many independent pseudo
channels (PCs). The design scales by giving every PC its own processing group:
one memory reader plus a few processing elements (PEs). A vertex dispatcher
made of small crossbars shuffles the vertices that all the readers fetch to the
PE that owns each vertex. Each iteration runs in one of two modes:

* **push** mode expands the frontier along out-edges;
* **pull** mode lets every unvisited vertex look for a parent in the frontier
  along in-edges.

A scheduler picks the mode for each iteration.

The default configuration is the largest one the design targets:

* 32 HBM pseudo channels;
* 32 processing groups of 2 PEs each, so 64 PEs;
* a dispatcher built from 3 layers of 4 × 4 crossbars;
* 131,072 vertices per PE, so up to 2^23 = 8,388,608 vertices in all.

## 1. The algorithm in bitmaps

Each PE keeps three bitmaps of its own vertices:

* **current frontier**: the vertices reached in the previous iteration;
* **next frontier**: the vertices reached in this iteration;
* **visited map**: every vertex reached so far.

Each PE also keeps a **level array** (8 bits per vertex).

One iteration (BFS level `L`) works like this:

| mode | P1 scans, issues a read for each | memory returns | P2 keeps the message if | P3 marks |
|------|------------------------------|----------------|-------------------------|----------|
| push | set bit of the current frontier (vertex `u`) | out-neighbours `w` of `u` | `w` is not visited | `w` |
| pull | clear bit of the visited map (vertex `u`) | in-neighbours `w` of `u` | `w` is in the current frontier | `u` |

P3 sets the bit in the next frontier and in the visited map, and writes level
`L+1`. At the iteration boundary the two frontier memories change roles. The
run ends when an iteration reaches no new vertex.

Push mode costs work in proportion to the frontier. Pull mode costs work in
proportion to the unvisited set. Push is therefore cheap when the frontier is
small, at the start and end of a search. Pull is cheap in the middle
iterations, when the frontier is huge.

## 2. Partitioning and memory layout

There are Q PEs (`NUM_PE`). PE `p` owns every vertex `v` with `v % Q == p` and
stores it at local index `v / Q`. This hashing spreads the hot vertices of
power-law graphs evenly.

Every PE has its own subgraph. The subgraph has a CSR part (out-edges, used in
push mode) and a CSC part (in-edges, used in pull mode). Each part has two
arrays of 32-bit words:

* an **offset array** of `nloc + 1` entries, where `nloc` is the PE's vertex
  count; the neighbours of local vertex `l` are entries
  `offset[l] .. offset[l+1]-1` of the edge array;
* an **edge array** that holds global vertex IDs.

A PE's subgraph lies in the pseudo channel of its group. The host passes the
four byte addresses of each PE's arrays in `sg_base[p]`
(`csr_off`, `csr_edge`, `csc_off`, `csc_edge`). Arrays may start at any
4-byte-aligned address.

## 3. Data path of one processing group

```
          +-----------------------------------------------------------+
 AXI4 --> | HBM reader  --(PE_PER_PG vertex streams)-->  dispatcher in |
 read     |    ^                                                      |
 port     |    | requests                                             |
          |  P1 (per PE)    P2 (per PE) <-- dispatcher out            |
          |                   | push: own P3                          |
          |                   | pull: soft crossbar in                |
          |                 P3 (per PE) <-- soft crossbar out (pull)  |
          +-----------------------------------------------------------+
```

**P1, workload preparation** (`pe_prepare`).
* Reads one 32-bit word of the bitmap being scanned. A word costs two cycles:
  the read, then the load.
* Emits one vertex request per cycle for each bit that qualifies.
* In push mode it clears each frontier word as it reads it. The memory that
  becomes the next frontier after the swap is therefore already empty.

**HBM reader** (`hbm_reader`). This is an AXI4 read master, shared by the PEs
of the group. For each request it makes two reads:

1. **The offset pair** `offset[l], offset[l+1]`.
   * Uses AXI ID 0.
   * Reads one beat, or two beats when the pair straddles a 128-bit beat.
   * An offset read is issued only while the result FIFO has room for every
     answer that could arrive. ID 0 data is therefore never back-pressured.
2. **The neighbour list**.
   * Uses AXI ID 1.
   * Cut into bursts of at most 64 beats that never cross a 1 KB boundary.

Edge beats are unpacked onto `PE_PER_PG` output ports. Port `j` sends lanes
`j, j+PE_PER_PG, …` of the beat, one vertex per cycle. Each message carries
`{vid = neighbour, aux = requesting vertex}`. The reader expects the memory to
return each ID in order, which is what AXI4 guarantees.

**P2, neighbour check** (`pe_check`).
* Reads one bitmap word per message and has one register stage.
* Push mode looks up the visited map and forwards `vid`.
* Pull mode looks up the current frontier and forwards `aux`, the child.
  The child may belong to another PE, so pull-mode survivors enter the
  **soft crossbar**.

**P3, result writing** (`pe_write`).
* Reads the next-frontier word, then writes the bit only if it was 0.
* The bitmaps answer one cycle late. A vertex written in the cycle just
  before is therefore compared directly against the incoming one.
* As a result every vertex is written once per iteration, and the new-vertex
  counter is exact. The scheduler uses that counter.

**Bitmaps and level array** (`bitmap_ram`, `level_ram`).
* Each bitmap has a word-wide read port and a single-bit or whole-word write
  port. This models a double-pumped block RAM: one read and one write per PE
  clock.
* The level array is not cleared between runs. A level is reported only
  where the visited bit is set, and unreached vertices read as `8'hFF`.

## 4. The multi-layer crossbar

A full N × N crossbar with a FIFO per input/output pair needs N² FIFOs, which
grows too fast. The dispatcher (`multilayer_xbar`) factors N = C^K and builds
K layers, each made of N/C small C × C switches (`xbar_switch`).

Each switch has the following structure:

* C × C FIFOs of depth 16, one per input/output pair.
* An input is ready when the FIFO toward its message's destination has room.
* Each output picks among its C FIFOs round-robin.
* Messages take one cycle per layer when nothing stalls.

**Routing.** Layer `l` (counting from 0) routes on base-C digit `l` of the
vertex ID, `(vid / C^l) % C`. After every layer the wires are shuffled: output
`w` of the layer (switch `w / C`, port `w % C`) becomes input
`(w % C) · (N/C) + w / C` of the next layer. This moves the digit just used to
the top of the wire index.

After K layers, the message with vertex `v` leaves on wire `v % N`, which is
the PE that owns it. For N = 16, C = 4 this gives the two-layer arrangement
where output switch `i` serves PEs `i, i+4, i+8, i+12`.

**FIFO count.** With the defaults (N = 64, C = 4, K = 3) the dispatcher has
3 × 16 × 16 = 768 FIFOs, against 4096 for a full 64 × 64 crossbar.

**Soft crossbar.** It is a second instance with the same shape. It only
carries vertex IDs in pull mode, and its outputs are always accepted because
P3 never stalls.

**K = 1.** Setting `XBAR_K = 1` and `XBAR_C = NUM_PE` gives a full crossbar.

Order is kept between any one input and any one output. No other order is
promised, and BFS needs none.

## 5. Scheduling and the end of an iteration

The scheduler (`scheduler`) broadcasts one-cycle commands to all PEs:

| command | what each PE does |
|---|---|
| `CMD_INIT` | Clears the used words of all bitmaps (a sweep of one word per cycle). Then the owner of `root` marks it visited and in the frontier, with level 0. |
| `CMD_ITER` | Starts P1 in the given mode at the given level, and clears the new-vertex counter. |
| `CMD_SWAP` | Exchanges the frontier roles. If the iteration just ended was a pull iteration, P1 did not clear the old frontier, so the PE clears it with a sweep first. |

**End of an iteration.** The scheduler waits until two things hold for two
consecutive cycles:

* every PE is ready, meaning its P1 scan is over;
* nothing is left in any reader, crossbar FIFO, or P2/P3 stage.

The AXI requests in flight count as reader contents.

**Mode choice.** The scheduler sums the PEs' new-vertex counters, then:

* a sum of 0 ends the run, with `done`;
* otherwise the next iteration runs in pull mode if the new frontier holds
  more than `num_vertices >> pull_shift` vertices, and in push mode if not.

`policy` can force push-only or pull-only runs. If the level would reach 255
(the unreached marker), the run stops with `overflow` set. Counters report how
many iterations ran in each mode.

## 6. Using the top level

`scalabfs_top` has plain-signal ports only:

* run control: `start`, `root`, `num_vertices`, `policy`
  (0 hybrid, 1 push, 2 pull), and `pull_shift`;
* status: `busy`, `done`, `overflow`, `bfs_level`, `push_iters`, `pull_iters`;
* the per-PE subgraph addresses `sg_base`;
* level read-out: `lv_rd_valid` with `lv_rd_vid`; the answer comes on
  `lv_rsp_valid` / `lv_rsp_level` three cycles later;
* one AXI4 read port per group, `m_ar_*` and `m_r_*`, with data width
  `2 · PE_PER_PG · 32` (128 bits by default).

To run a search:

1. Load the subgraphs into memory.
2. Drive `sg_base`.
3. Pulse `start` with the other run-control inputs held.
4. Wait for `done`.
5. Read the levels.

Parameters of the top:

| parameter | default | meaning |
|---|---|---|
| `NUM_PG` | 32 | processing groups, one per HBM pseudo channel |
| `NUM_PE` | 64 | PEs; must equal `XBAR_C ** XBAR_K` and be a multiple of `NUM_PG` |
| `XBAR_C`, `XBAR_K` | 4, 3 | switch size and layer count of both crossbars |
| `VERTS_PER_PE` | 131072 | bitmap and level-array depth per PE |

### Capacity for the standard benchmark graphs

The design holds up to 8,388,608 vertices, and every graph in the usual
evaluation set fits.

* **Vertices.** The largest graph set is RMAT scale 23, with exactly 2^23
  vertices, which fills every PE exactly. soc-LiveJournal (4.85 M vertices)
  needs about 76 K entries per PE.
* **Edges.** Every edge is stored twice, once in CSR and once in CSC, as a
  4-byte ID. The largest graph, RMAT23-64 (517 M edges), therefore needs about
  125 MiB per pseudo channel. Each pseudo channel has 256 MiB.
* **Levels.** An 8-bit level allows 254 BFS levels, far more than these
  graphs need.

## 7. Where this RTL departs from the published design

* **PE rate.** The published design sizes the AXI data width as
  `2 · PEs · 32` bits because its double-pumped bitmaps let a PE handle two
  vertices per cycle. Here the width is the same, but each stage handles one
  vertex per cycle. The double pump is used as one read plus one write per
  bitmap instead. A group therefore consumes half a beat per cycle, and peak
  throughput is half the published one.
* **Mode switching.** The published design says only that push serves the
  first and last iterations and pull the middle ones. The threshold rule
  (`num_vertices >> pull_shift`) is this design's own.
* **Details that are this design's own choice:**
  * the soft crossbar's structure, assumed to match the dispatcher;
  * FIFO style and arbitration;
  * the AXI ID use and burst cutting in the reader;
  * the scan rate of P1;
  * the 8-bit level width;
  * the command protocol;
  * the end-of-iteration test;
  * the host interface.
* **Not included.** The HBM stacks, their controllers and switch network, and
  the host software are vendor or host parts. Testbenches model one pseudo
  channel behaviourally (`tb/hbm_pc_model.sv`). The design uses no HBM
  switch network: each group reads only its own pseudo channel.
* **Clock.** There is no clock-domain logic. The published design runs its
  kernel at 90 MHz with the bitmaps double-pumped; here everything is
  single-clock.

## 8. Verification

Every module has a self-checking testbench in `tb/`. Each one ends with a
`TB_RESULT checks=N failures=M` line and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_sync_fifo` | Against a queue model under random traffic; full and empty behaviour. |
| `tb_xbar_switch` | Every message arrives at the port of its digit, in order per input/output pair. Also one-cycle latency and back pressure from a stalled output. |
| `tb_multilayer_xbar` | Every message reaches output `vid % N`, in order per pair. Also K-cycle latency and back pressure. |
| `tb_bitmap_ram`, `tb_level_ram` | Against array models, with one-cycle read latency. The bitmap test also checks read-first behaviour and the priority of word writes over bit writes. |
| `tb_pe_prepare` | Exactly the right requests in both modes, frontier clearing, and a scan-time bound. |
| `tb_pe_check` | Filtering and forwarding in both modes under stalls; one message per cycle at full rate. |
| `tb_pe_write` | Duplicates, including back-to-back ones, are written once; exact new-vertex count. |
| `tb_pe` | One PE with the testbench acting as reader and crossbars, on random mode sequences. Checks the requests of every iteration, the new-vertex count per level, and every vertex level. |
| `tb_hbm_reader` | Against the memory model: AXI rules (burst length, 1 KB boundary, offset read size), the exact multiset of messages in both modes, and `PE_PER_PG` vertices per cycle from a long list. |
| `tb_scheduler` | Command order, mode choice for each policy, level, iteration end within three cycles of quiet, counters, and the overflow stop. |
| `tb_pg`, `tb_scalabfs_top` | Whole system: 1 group × 2 PEs, and 4 groups × 4 PEs. Four searches (hybrid, push-only, pull-only, another root) are compared vertex by vertex with a reference BFS. Each mechanism must happen at least once: dispatcher back pressure, soft-crossbar traffic, two-beat offset reads, bursts cut at 1 KB, mode switches, and duplicates caught in P3. |
| `tb_scalabfs_full` | The same checks with the top at its default parameters (64 PEs, 32 channels, 3-layer dispatcher) on a 6,000-vertex graph. |
| `tb_rmat`, `tb_rmat_full` | Synthetic RMAT graphs of the kind used for benchmarking: Kronecker generator with A = 0.57, B = 0.19, C = 0.19, vertex IDs scrambled, and every undirected edge stored in both directions. `tb_rmat` uses 2^14 vertices (about 0.5 M directed edges) on 4 groups × 4 PEs. `tb_rmat_full` uses 2^15 vertices (about 1 M directed edges) on the default-size top. Same level and mechanism checks as above. |

The system testbenches share the `bfs_env` environment. It builds a random
graph with a hub vertex, whose many edges into one PE create back pressure.
It lays the graph out as per-PE CSR/CSC images, loads one memory model per
channel, and runs the searches.

### Simulating

Simulate with plain Verilator. The `-y` flags find the modules by file name:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/scalabfs_pkg.sv tb/tb_scalabfs_top.sv --top-module tb_scalabfs_top
./obj_dir/Vtb_scalabfs_top
```

The per-block testbenches build in seconds. The full-size one takes about
two minutes to build, because 64 PEs with 131,072-vertex memories are a large
model. After building, it runs in well under a minute.
`tb_rmat_full` runs for one to two minutes.

The largest graph simulated has 2^15 vertices and about 1 M edges, on the
default-size top. The full capacity of 2^23 vertices per search has only been
worked out on paper (section 6), not simulated.
