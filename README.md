# GEN-Graph: SystemVerilog model of a graph dynamic-programming accelerator

Many genomics and graph-analytics kernels are dynamic programs over a graph.
Two of them dominate:

* **All-pairs shortest paths (APSP)** on a weighted graph. This is dense
  min-plus matrix arithmetic: Floyd-Warshall inside a block, and min-plus
  products to merge blocks.
* **Sequence-to-graph (S2G) alignment** of sequencing reads against a variation
  graph. This is a bit-parallel dynamic program that walks the graph node by
  node.

The accelerator gives each kernel its own engine, placed next to the memory
that holds its data:

* The **matrix tile** computes on 1024 × 1024 blocks of 32-bit distances that
  are kept in place, in phase-change-memory arrays. The PCM-FW tile runs
  Floyd-Warshall. The PCM-MP tile runs the min-plus merge. A small stream
  engine unpacks sparse (CSR) graph data into the dense rows these tiles work on.
* The **traversal tile** sits on the logic die of an HBM stack. It has one
  processing unit (PU) per HBM channel, 16 in all. Each PU holds 64 processing
  elements (PEs) that evaluate the S2G recurrence with 128-bit bit-parallel
  logic. A small ring links the PUs.

This repository holds synthesizable RTL for the digital parts of both tiles,
plus a top level that joins them. It also holds a self-checking testbench for
every module. The memory devices themselves are not modelled: HBM, FeNAND
flash, the PCM cells with their analog periphery, and the die-to-die link.
Their data enter and leave through plain ports. The host software that
partitions graphs and compiles jobs is not modelled either.

## 1. The S2G recurrence and the bit-parallel unit

The query read is split into windows of W = 128 bases. For each graph node v,
in topological order, and each window i, the state `S[v]` is a 128-bit vector.
Bit j is set when the first `i*128 + j + 1` bases of the read can end at v.
One step of the recurrence is:

```
D_in   = OR of S[u] over the predecessors u of v
S_new  = ((D_in << 1) | c_in) & M[base(v)]
c_in   = 1 for window 0, otherwise C[v] = MSB of node v's state in window i-1
C[v]   = MSB(S_new)             (kept for window i+1)
```

`M[b]` is the match mask of base b in the current window. `bplu` evaluates one
step in one combinational pass. The score of a node is
`window*128 + (index of the highest set bit) + 1`, which is the longest read
prefix that ends at that node. The PEs track the best score seen.

**Dual BPLU.** Each PE has two BPLUs behind a carry multiplexer (`dual_bplu`),
and the `mode` input sets how they work:

* **Long mode.** The high unit takes the low unit's carry-out, so the pair acts
  as one 256-bit unit. It evaluates windows 2p and 2p+1 of the same node in one
  cycle.
* **Short mode.** The high unit gets a constant carry of 1, so the two units are
  independent. Each aligns its own read of up to 128 bases.

## 2. Inside a PE (`traversal_pe`)

A PE is a two-stage pipeline. One node token enters it per cycle.

* **Stage A** registers the incoming node token. If the node has a
  non-adjacent predecessor (a *hop*), stage A sends a read to the PU's shared
  SRAM. The address is `{PE id, (v - hop_dist)[6:0]}`. Each PE therefore owns
  a 128-slot window of hop states, and a hop may reach 2–127 nodes back.
* **Stage B** works out `D_in`, applies the BPLU step and stores the result.
  - `D_in` is the *Self* state (the previous node, from the stream register
    file) ORed with the *Hop* state (from the shared SRAM). Either one is used
    only if the node record marks that predecessor.
  - The result goes back into the stream register file, which then holds the
    Self operand of the next node.
  - If the node is a hop source (a later node will read its state), the result
    is also written to the shared SRAM.
  - A 2-bit direction code `{hop used, self used}` is logged in the traceback
    memory.
  - The best score is updated, but only for windows that lie inside the read
    (`win_ok`).

The PE has three storage tiers:

| Tier | Module | Size | Use here |
|---|---|---|---|
| 1 | `stream_regfile` | 3 × 128 bit | the current 256-bit state (entries 0 and 1) and the last Hop operand (entry 2) |
| 2 | `pattern_buffer` | 256 B | match masks: 2 banks × 4 bases × 2 halves × 128 bit. One bank is in use while the host fills the other for the next pass |
| 3 | `traceback_memory` | 4 KB | circular log of 16 384 two-bit codes, with a registered replay port |

The four-way operand multiplexer (`pe_input_mux`: Self, Replay, Hop, Neighbor)
sits at the PE entry. The datapath only ever selects Self and Hop:

* The Replay output (the traceback code) is wired to the multiplexer but never
  selected.
* The Neighbor input (the adjacent PE's state) is wired to the multiplexer but
  never selected.
* No job in this design needs either leg.

**Stalls.** The shared SRAM serves one access per bank per cycle. When any
request in the PU loses arbitration, the whole PU stalls for one cycle:
`stall = |(requests & ~already_served & ~granted)`. Requests that were already
served are remembered, so they are not issued again.

## 3. Processing unit (`processing_unit`)

A PU contains the following:

* 64 PEs.
* An input scratchpad: 8192 node records of 32 bits each (`input_scratchpad`).
* A shared banked SRAM: 8192 states of 256 bits in 32 banks, which is 256 KB
  (`shared_banked_sram`). The bank is `addr[4:0] ^ addr[9:5]`.
* A 1 KB instruction buffer of job words (`instruction_buffer`).
* A carry FIFO (`carry_fifo`).
* A controller.

**Node record** (`gg_pkg::node_rec_t`, 32 bits):

| Bits | Field |
|---|---|
| 1:0 | base (A, C, G, T) |
| 5 | `self_pred`: node v-1 is a predecessor |
| 6 | `hop_pred`: node v-`hop_dist` is a predecessor |
| 7 | `hop_src`: a later node reads this node's state |
| 8 | `last` |
| 15:9 | `hop_dist` |

**Job word:**

| Bits | Field |
|---|---|
| 31 | halt |
| 30 | mode (1 = long) |
| 29:16 | number of nodes |
| 15:6 | number of query windows (long mode) |

The controller runs job words from address 0 until it reaches one with the
halt bit set. Its states are IDLE, FETCH, DECODE, RUN, DRAIN and NEXT.

**Short mode.** The 64 PEs form 16 groups of 4. Group g streams scratchpad
slice g (512 records) through its four PEs. Every PE carries two reads, so one
PU aligns 128 short reads against 16 subgraphs in a single job.

**Long mode.** PE 0 streams the whole scratchpad through a 64-PE chain. PE p
handles windows 2p and 2p+1, and the carry moves from PE to PE along with the
node. One pass therefore covers 128 windows, which is 16 384 bases.

Longer reads take more passes:

* The last PE pushes the carry of every node into the carry FIFO.
* On the next pass, PE 0 pops the carries in the same node order.
* Each pass uses the other pattern-buffer bank (bank = pass mod 2). Beyond
  the second pass, the host must reload the idle bank between passes.

`best_long` is the maximum score over all PEs.

## 4. Traversal tile (`traversal_tile`) and the ring

Each of the 16 HBM channels feeds its own PU through a 146-bit packet:

| Bits | Field |
|---|---|
| 145:144 | target: 0 scratchpad, 1 instruction buffer, 2 pattern buffer |
| 143:128 | address; for the pattern buffer `{pe, bank, base[1:0], half}` |
| 127:0 | data |

A packet for a different PU enters `ring_router`, a one-way slotted ring:

* It moves one stop per cycle.
* A packet already on the ring has priority over a new injection at the same
  stop.
* A packet leaves the ring at its destination stop.

The tile counts ring hops for performance monitoring.

## 5. PCM-FW tile (`pcm_fw_tile`, `permutation_unit`, `felix_bitserial_alu`)

The tile holds an n × n block (n ≤ 1024) of 32-bit distances. All-ones means
"no edge", and additions saturate to it. The tile runs Floyd-Warshall in
place. `permutation_unit` sequences each pivot k:

1. Read row k (Panel_Row) and capture column k (Panel_Col).
2. Visit the other rows in the order `(k+1+t) mod n`, so row k is never
   overwritten while it is still being used. For each row:
   * If its Panel_Col entry is infinite, the row cannot improve and is
     **pruned**: it costs no ALU pass and no write.
   * Otherwise the next row is **prefetched** while the bit-serial ALU works
     on this one.
   * The ALU computes `D[i][k] + D[k][j]` against `D[i][j]` for every lane.
     It adds bit-serially, one bit per cycle over 32 cycles, then compares by
     bit-serial subtraction over another 32 cycles. The sign bits form the
     write mask.
   * A row whose mask is empty is **skipped**.
   * Any other row is written by the DMA engine with a 10-cycle write latency,
     under the mask.
3. Rows are grouped into **bursts** of 32 for the row buffer.

Timing:

* Read: 1 cycle.
* ALU result: 2·32+1 cycles after start.
* Row write: commits WR_LAT+2 = 12 cycles after the ALU finishes.

The tile reports counters for pruned rows, skipped writes, written rows and
bursts.

## 6. PCM-MP tile (`pcm_mp_tile`, `min_comparator_tree`)

The merge step of hierarchical APSP is:

`X[m][n] = min(X[m][n], min_j( min_i(D_C1[m][i] + DB[i][j]) + D_C2[j][n] ))`

The tile computes it in two min-plus stages. Each stage reduces a 1024-wide
vector through `min_comparator_tree`:

* The tree has 32 groups of 32 values. Each group passes through five
  comparator levels.
* A second five-level tree then combines the 32 group winners.
* Each tree has one extra register stage.
* Latency is 13 cycles, and a new vector can enter every cycle.

DB and D_C2 are stored transposed, so that one row read gives the operand
vector of one reduction. Writes to X are compare-and-swap: a write happens only
when the new value is smaller. Host ports load and read all four matrices.

## 7. Stream engine (`stream_engine`) and top level (`gen_graph_top`)

The stream engine turns a CSR stream into dense rows of the FW tile:

* It accepts one (column, weight) entry per cycle.
* Each row starts as infinity with 0 on the diagonal.
* A repeated column keeps the minimum weight.
* A row is emitted when its last entry arrives. An empty row is flagged
  directly.

`gen_graph_top` wires the pieces together:

* The stream engine feeds the FW tile.
* The MP tile gets its operands through host ports, as in a flow where
  results go back through HBM.
* The traversal tile gets its 16 channel ports.

The top has plain ports and these default parameters: `N = 1024` and
`MP_G = 32`, derived as `1 << (log2 N / 2)`, for the matrix side; `NPU = 16`
and `NPE = 64` for the traversal side.

## 8. Where this RTL departs from the source design

* **Shared SRAM capacity.** It is 256 KB, as in the source design. The source
  design sizes it for 16 384 states of 128 bits. A PE here produces a 256-bit
  state, so the same 256 KB holds 8192 states.
* **Bank hash and arbitration.** The bank hash and the fixed-priority
  arbitration are this design's own; only "hashed" banking is given. Bank
  conflicts stall the whole PU.
* **Scratchpad contents.** The input scratchpad holds node records only. Match
  masks go straight to the per-PE pattern buffers.
* **Control.** The instruction buffer holds simple job words instead of the
  original S2G microcode, whose encoding is not published.
* **Unused multiplexer legs.** The Replay and Neighbor legs of the PE
  multiplexer are wired but never selected. In the source design the
  multiplexer switches to Replay when traceback is enabled; here the
  traceback log is read from outside the PE through `replay_off` and
  `replay_code`, and path reconstruction is left to the reader of that port.
* **Long subgraphs.** A subgraph spanning several PUs is not chained over the
  ring. The ring only carries load packets.
* **Comparator tree depth.** The tree uses five comparator levels per stage
  (log2 32), which gives the stated total latency of 13 cycles. A figure in
  the source design labels the tree "6-level".
* **PCM tiles.** Each PCM tile is one logical array. Its 130 physical units,
  the H-tree between them and the analog cell timing are not modelled. The
  MP tile adds in one cycle; only the FW tile models bit-serial timing.
* **Stream engine.** The stream engine only expands CSR into dense rows. The
  boundary-extraction and format-conversion steps are missing. Its
  double 64 KB stream buffers are reduced to one row buffer.
* **Partitioning.** Graph partitioning and recursion over blocks larger than
  1024 vertices are left to the host.

## 9. What fits at the default size

| Workload | Fits | Why |
|---|---|---|
| APSP on 100, 1024, 32 768 and 2.45M vertices | yes | Every leaf block has at most 1024 vertices, and each merge fits a 1024 × 1024 tile. The full distance data of large graphs stays off chip. |
| Short reads of 100 bp | yes | Each read fits one BPLU, and a chip holds 2048 reads in flight. |
| Short reads of 129–300 bp | yes | They run in long mode, 2–3 windows each. |
| Long reads of 10 kbp | partly | 79 windows fit in one pass. A subgraph of more than 8192 nodes does not fit one PU's scratchpad. |

## 10. Files, simulation and tests

The RTL is in `rtl/`:

* Package: `gg_pkg.sv`.
* One module per file, named after the module.

Testbenches are in `tb/`:

* Every module has `tb/tb_<module>.sv`.
* Each testbench drives random stimulus with `$urandom` and checks it against
  a reference model written in the testbench.
* Each one prints `TB_RESULT checks=<n> failures=<n>` and has a cycle
  watchdog.
* Most testbenches override parameters to keep runs short.

The two top-level testbenches:

* `tb_gen_graph_top` runs the whole accelerator with N = 16 and 4 PUs of 8
  PEs. It counts, and requires, every mechanism at least once: CSR expansion,
  FW pruning, skipped writes, bursts, MP compare-and-swap updates, SRAM stalls,
  Hop reads, multi-pass long reads, a switch between short and long mode,
  ring transfers, and both local and remote channel packets.
* `tb_gen_graph_top_full` instantiates the top with all defaults (N = 1024,
  16 PUs × 64 PEs). It runs an 8-vertex Floyd-Warshall and merge, and a
  10 kbp long read over a 200-node graph sent across the ring.

To simulate one testbench with Verilator, for example the PE:

```
verilator --binary --timing -Wno-fatal -Irtl --top-module tb_traversal_pe \
    rtl/gg_pkg.sv $(ls rtl/*.sv | grep -v gg_pkg) tb/tb_traversal_pe.sv
./obj_dir/Vtb_traversal_pe
```

Keep `gg_pkg.sv` first in the file list. The full-size top takes several
minutes to compile, because the default configuration models about 230 Mbit
of on-chip storage (five 1024 × 1024 × 32-bit PCM matrices plus the PU SRAMs).
