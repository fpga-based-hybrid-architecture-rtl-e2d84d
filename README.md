# Hybrid parallel RRT accelerator

A rapidly-exploring random tree (RRT) planner grows a tree of reachable
robot states. It repeats three steps:

1. draw a random point on the map;
2. find the tree node nearest to it;
3. step from that node towards the point and add the new state as a node.

One core does this serially. Running many cores in parallel on one FPGA raises
the node rate. The hard part is letting many cores write into one shared
road-map, and there are two classic ways to do it:

* **Combinatorial.** Every core has its own write channel into a multi-port
  memory. A combinatorial decoder gives all cores that want to write a slot in
  the same clock. There is no waiting, but the write logic and memory banks grow
  with the number of writers, and so does the power.
* **Hierarchical.** Cores sit at the leaves of a binary tree of pollers and
  FIFOs. Each poller visits its two children in turn, so nodes trickle up to a
  single writer. This is cheap, but a core often waits for its sibling's turn.

This design is a **hybrid** of the two. Of the N cores:

* M cores are combinatorial;
* N−M cores are hierarchical;
* a final combinatorial block with M+1 write channels merges both groups into
  the global road-map.

M is chosen at design time to trade speed-up against power (see *Choosing M*).
The defaults are N = 64 cores with M = 4, exploring a 512×512 map until 10,000
nodes are stored.

```
  RRT 0..M-1 ──► combinatorial circuit + M-bank memory (inner map, read by RRT 0..M-1)
      │                                                     
      └──────────────┐                                       
  RRT M..N-1 ─► POLL ─► FIFO ─► FIFO ... ─► root FIFO ──┐     
                     (binary tree)                      ▼     
                     global combinatorial circuit + (M+1)-bank memory
                     (global road-map, read by RRT M..N-1 and by the host)
```

## The RRT core (`rrt_module`)

Each core runs one loop:

| Step | Unit | What it does | Clocks |
|---|---|---|---|
| Sample | `prng` | 64-bit linear congruential generator, two steps per sample; the upper halves, taken modulo the map size, give x and y | 2 |
| Nearest node | `nearest_neighbour` | reads stored nodes 0..count−1, one per clock, over an asynchronous read channel | count+1 |
| Extend | `kinematic_path` | adds the new node | 39 |
| Hand over | handshake | waits for a grant from the parent | variable |

The nearest-node search computes dx²+dy² for each node. The map is cut into
BOX×BOX boxes. Nodes in the sample's box or in the eight boxes around it win
over any node farther out. If that neighbourhood is empty, the plain nearest
node is used.

The extension works in three stages:

1. A vectoring CORDIC (`cordic_atan`) gives the heading to the sample.
2. A rotation CORDIC (`cordic_sincos`) gives its cosine and sine.
3. One multiply and one add place the new node at `near + STEP·(cos, sin)`,
   clamped to the map.

Both CORDICs run 16 iterations.

**Ports.** The core's ports carry these names: `go`, `rand_input[63:0]`,
`count`, `array_column`, `array_row`, `array_theta`, `i`, `box_no`,
`increment`, `output_string[319:0]`, `ack`, `ready`, `rrt_done` and `select`.

* `array_*` return the node at address `i`.
* `count` is the number of stored nodes.
* `increment` counts the nodes handed over.
* `select` marks the read channel as busy.

The design adds `aresetn`, `halt`, `start_column` and `start_row`. After reset,
the first node a core offers is its start state, which seeds the memory.

**Node record (320 bits, ten 32-bit words, word 0 in the low bits).** The
fields are x, y, θ, parent x, parent y, parent θ, parent index, serial number,
box number and core id. The memories store only the first F words (x, y, θ).

**Number formats.**

* Coordinates are Q24.8 (32 bits).
* Headings are Q3.13 in radians (16 bits).
* sin/cos are Q2.14.

## The write-acknowledge handshake

All parents talk to a core in the same way:

* `ready` is high while a node waits.
* The parent drives `go` when it grants the bus.
* In a cycle with `ready && go`, the core raises `ack` combinationally, and the
  parent captures `output_string` in that same cycle.

The parent's `go` never depends on `ready`, so the handshake has no
combinational loop. The parent is a POLL or a combinatorial circuit.

## Combinatorial circuit and interleaved banks

`combinatorial_circuit` takes one request bit per writer. Conceptually it is a
table with 2^N entries mapping each request pattern to memory write controls.
Here it is written as the function that table holds:

* writer p gets `go = room && allow[p]`;
* it gets a write enable `we = req && go`;
* its slot offset is the number of enabled writers below it (a prefix
  population count);
* the total number of writes is `n_wr`.

`combinatorial_block` adds the offsets to the fill counter `count`, so that
one clock's writers get consecutive global addresses.

`multiport_memory` builds the global address space from NW single-write-port
banks:

* global address a lives in bank `a mod NW`, at local address `a div NW`;
* NW consecutive addresses therefore always fall in NW different banks, so all
  writes of a window complete in one clock with no bank conflict;
* reads are asynchronous, and every read channel has its own read multiplexer
  over the banks.

With the default DEPTH of 102,400 words of F·32 bits, the memory holds 400·F KB.

`room` is high while NP more nodes fit. When the memory is full, every writer
waits.

## The POLL/FIFO tree (`poll`, `fifo_fwft`, `fifo_node`, `hierarchical_block`)

Each node of the tree works as follows:

* A **POLL** serves two cores. Its pointer moves to the other child every
  clock. It raises `go` for the current child when its FIFO has room, and
  registers an acknowledged node into the FIFO input.
* A **FIFO node** does the same with two child FIFOs and owns a
  first-word-fall-through FIFO.

In every FIFO, the head word is visible on `m_tdata` whenever `m_tvalid` is
high, and a word leaves when `m_tready` is high in the same cycle.

The tree is kept in heap order:

* node 1 is the root;
* node n has children 2n and 2n+1;
* the POLL FIFOs are nodes LP..2LP−1, where LP is the number of POLLs rounded
  up to a power of two. Missing POLLs read as empty.

A node needs at least 3 + 2·log2(LP) clocks from its acknowledge to being stored in the global map.
Nothing is lost under back-pressure. When the global memory refuses the
stream, FIFOs fill bottom-up and the POLLs stop granting.

## Global merge and run control (`hybrid_rrt_top`)

The global `combinatorial_block` has M+1 write channels:

* channels 0..M−1 are the combinatorial cores;
* channel M is the tree's root stream.

A combinatorial core is granted only when both the inner and the global memory
have room. Its node then enters both memories in the same clock. An assertion
checks that the two writes always occur together.

Which map each group searches:

* combinatorial cores search the inner map;
* hierarchical cores search the global map;
* the host reads the global map through `host_raddr`/`host_rdata`.

When `global_count` reaches TARGET:

* `done` rises and `irq` pulses once;
* `cycles` holds the length of the run in clocks;
* every core halts, drops any pending node and raises `rrt_done`.

Up to M overshoot nodes can be written in the last window.

## Choosing M

The split follows a design-time cost function:

* Speed-up and power of each style are fitted as functions of the number of
  modules.
* M maximises the speed-up of the N−M hierarchical modules plus M+1
  combinatorial blocks, subject to total power P_Hier(N−M) + P_Combi(M+1)
  staying under a budget.
* M is found with a branch-and-bound search.

No M is stated for the evaluated systems. With the fitted curves, and a budget
of 17.3 W (the power measured for a 64-core hybrid), the largest feasible M for
N = 64 is 4 (16.8 W predicted). That is the default.

Two more design-time steps are not part of the RTL:

* the search for M itself;
* the choice of which cores are combinatorial, made from area estimates of
  their start states.

Both decide only parameters and which start states go to cores 0..M−1.

## Departures and open points

* The random generator, the exact box search, the CORDICs, the FIFOs and the
  table-free combinatorial circuit are this design's own. On the FPGA they
  would be vendor IP or DSP slices.
* There is no collision checking. The maps' obstacles are not modelled, and
  every step is a straight move of STEP units (8.0 by default).
* Only planar (x, y, θ) kinematics are built. Quad-copter and fixed-wing models
  would need a different `kinematic_path` and a larger F.
* The memory depth follows 400·F KB, which is 1.2 MB at F = 3. That is more
  than the block RAM of small Zynq parts. The RTL writes it as plain arrays,
  with one read multiplexer per read channel (61 channels on the global map at
  the defaults). It is meant for simulation and study; a real build would
  shrink DEPTH or time-share read ports.
* The nearest-node search scans every stored node, so iteration time grows
  with the tree.
* MAP_W/MAP_H (512), BOX (32), STEP (8.0), FIFO_DEPTH (16) and the seeds are
  free choices.

## Simulating

Every unit has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops itself through a watchdog. With
verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/rrt_pkg.sv tb/tb_hybrid_rrt_top.sv --top-module tb_hybrid_rrt_top
./obj_dir/Vtb_hybrid_rrt_top
```

The end-to-end testbenches share their checks in `tb/hybrid_checks.svh`.

* `tb_hybrid_rrt_top`: a reduced system with N=16, M=2, TARGET=600 and a
  128×128 map.
* `tb_hybrid_rrt_full`: the defaults, with 64 cores and 10,000 nodes. It takes
  about 640,000 clocks, roughly half a minute of simulation.

* `tb_hybrid_rrt_sizes`: the same 10,000-node task with 32 cores (M=3) and
  then 16 cores (M=2), through the harness `hybrid_size_run`. It takes about
  3.7 million clocks, a little over a minute. A 4-core system (M=1) needs about
  9.5 million clocks for the task; it works with the same harness.

They check every stored node against shadow copies of both memories, and they
check step length, parent validity and halting. They count how often each
mechanism happened and fail if one never did:

* multi-writer windows (when M > 1);
* merges of tree and combinatorial writes;
* polls of an idle child;
* sibling waits;
* tree back-pressure (not required in the size runs, where the tree need
  not fill);
* nearest-node fallbacks;
* halting;
* the interrupt.

To change the system, set N, M, F, DEPTH, TARGET and the map parameters on
`hybrid_rrt_top`. H = N−M cores go into the tree; any H ≥ 1 works.
