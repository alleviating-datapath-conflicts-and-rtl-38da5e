# HiGraph: a graph accelerator whose channels talk through multi-stage FIFO networks

A graph accelerator that keeps the whole graph on chip can give each array
(active vertices, edge offsets, edges, vertex properties) many independent
memory parts and run dozens of channels in parallel. What limits it is not
memory bandwidth but the places where channels must exchange data:

1. **Offset access.** An active vertex `u` needs two neighbouring offset
   entries, `Off = Offset[u]` and `nOff = Offset[u+1]`. These sit in two
   adjacent memory parts, so one vertex occupies two read ports and competes
   with the vertices of the neighbouring channels.
2. **Edge access.** One edge list `[Off, nOff)` covers a run of consecutive
   Edge Array parts. A single request fans out to many ports.
3. **Dataflow propagation.** Every edge produces an update for its
   destination vertex. That vertex lives in any back-end part, so this is a
   full many-to-many exchange.

A crossbar with arbitration at each of these points stalls the losing
channels and grows too large to close timing as channels are added. This
design replaces each crossbar with a **multi-stage decentralised propagation
network (MDP-network)**: a butterfly of small two-input, two-output buffered
switches. A datum is never refused because of a conflict at its final
destination. It moves one stage per cycle and waits in a FIFO when the next
stage is busy, trading a few cycles of latency for throughput. Each switch
only ever looks at two channels, so the design has no wide central arbiter.

The RTL implements the complete accelerator for four vertex programs: BFS,
SSSP, SSWP (widest path) and PageRank. The default size is 32 front-end
channels, 32 back-end channels, 2^19 vertices and 2^22 edges, all on chip.

## Data layout and programming model

The graph is held in compressed sparse row form. Every array is interleaved
over parts:

| Array        | Parts   | Entry                                  | Location of entry `i`           |
|--------------|---------|----------------------------------------|---------------------------------|
| ActiveVertex | `N_FE`  | `{prop, ID}`, 38 bits                  | appended per part               |
| Offset       | `N_FE`  | edge position, 23 bits                 | part `i mod N_FE`, row `i / N_FE` |
| Edge         | `N_BE`  | `{weight[3:0], dst[18:0]}`             | part `i mod N_BE`, row `i / N_BE` |
| Property     | `N_BE`  | 19 bits                                | part `v mod N_BE`, row `v / N_BE` |
| tProperty    | `N_BE`  | 19 bits                                | same as Property                |

Vertex IDs and properties are 19 bits wide. The all-ones value (`PROP_INF`)
stands for infinity.

A run alternates two phases:

- **Scatter.** For each active vertex `u` and each edge `(u, v, w)`:
  `imm = Process_Edge(u.prop, w)` and `tProp[v] = Reduce(tProp[v], imm)`.
- **Apply.** For each vertex:
  `r = Apply(prop, tProp)`. If `r` differs from `prop`, the vertex is
  updated and appended to the next ActiveVertex list.

A run stops when no vertex is active or when `max_iter` iterations have run.

| Mode   | Process_Edge          | Reduce / Apply        |
|--------|-----------------------|-----------------------|
| BFS    | `prop + 1`            | min                   |
| SSSP   | `prop + w`            | min                   |
| SSWP   | `min(prop, w)`        | max                   |
| PR     | `(prop * w) >> 4`     | sum; Apply = `pr_base + tProp` |

All sums saturate at infinity. For PageRank, the 4-bit edge weight is read as the fixed-point factor `w / 16`,
for example the damping factor divided by the source's out-degree. Every vertex is
re-activated in each iteration, and tProperty is cleared after it is
applied.

## The MDP-network (`mdp_network`, `mdp_2w2r`, `fifo_2w1r`)

The basic cell is a **2-write 1-read FIFO**. It can store two data in the
same cycle and release one. It takes writes only while at least two entries
are free, so a writer never needs to know whether the other writer is active.

A **2W2R switch** holds two such FIFOs, one for each of its outputs. Each of
its two inputs writes into the FIFO named by one address bit of its datum.
The two inputs therefore never block each other, unless a FIFO is genuinely
full.

For `N = 2^S` channels, the network has `S` stages of `N/2` switches. In
stage `i`:

- `group_base = N >> i` and `step = group_base / 2`.
- Channels `j*group_base + k` and `j*group_base + k + step` share a switch,
  for `k < step`.
- The switch steers on destination bit `S-1-i`, from the most significant bit
  downwards. A 0 goes to the lower channel of the pair and a 1 to the upper.

After stage `i`, a datum is inside the right group of size `N >> (i+1)`.
After the last stage it is at its destination channel. Ready and valid
signals travel backwards and forwards stage by stage, with no combinational
path through the whole network. The minimum latency is one cycle per stage.

Buffer sizing: each 2W1R FIFO holds `MDP_DEPTH` entries, 32 by default.
Over the five stages of a 32-channel network that gives 160 entries per
channel.

## Offset access (`offset_access`, `odd_even_arbiter`)

Active vertices enter an MDP-network keyed on `u.ID mod N`. Channel `c` then
only holds vertices whose `Off` entry is in Offset part `c`. Their `nOff`
entry is in part `c+1`, or in part 0 one row further down when `c = N-1`.
Each channel therefore needs its own read port and the next one. Any conflict
is only with its two neighbours.

The **odd-even arbiter** resolves these conflicts without a central priority
chain:

- In one cycle the odd channels have priority, in the next the even ones.
- A priority channel is always granted. Two priority channels never share a
  port, because they are two apart.
- A non-priority channel is granted if both of its ports are either free or
  already claimed for the *same row*. In the second case the read is shared,
  and one memory read serves two vertices.

Granted vertices read both offsets in the same cycle. They leave as
`{prop, nOff, Off}` through a small credit-controlled buffer. An assertion
checks that one port never serves two different rows.

## Edge access (`replay_engine`, `edge_split_2w2r`, `edge_mdp_network`, `dispatcher`)

1. **Replay engine.** One per front-end channel. It cuts `[Off, nOff)` into
   pieces `{Off, Len}` that do not cross an Edge Array row, i.e. a multiple of
   `N_BE`. A piece then touches each Edge part at most once. Empty lists are
   dropped.
2. **Edge MDP-network.** This has the same wiring as above, but it routes on
   the edge position bits `log2(N_BE)-1` downwards. A piece whose part range
   straddles the middle of the switch's target range is **split** into two
   pieces. The two pieces are written into both FIFOs in the same cycle. For
   example, with 16 targets, `Off 4, Len 9` becomes `Off 4, Len 4` towards
   targets 0–7 and `Off 8, Len 5` towards targets 8–15. Each stage halves the
   target range, so at the output channel `c` every piece lies inside that
   channel's `G = N_BE/N_FE` parts.
3. **Dispatcher.** It decodes which of its `G` parts a piece covers. It issues
   all of those reads in the same cycle, once every one of those lanes has
   room. At the default `N_FE = N_BE = 32`, `G = 1`, so the dispatcher is
   just a valid/ready stage. Its decode matters when `N_BE > N_FE`.

## Back end (`edge_lane`, `epe`, `mdp_network`, `vpe`, `apply_unit`)

Each **edge lane** reads one Edge part. Its **ePE** computes
`imm = Process_Edge(prop, w)` one cycle later. The results `{imm, dst}` enter
the **dataflow MDP-network**, keyed on `dst mod N_BE`, which takes each
update to the back-end channel that owns `dst`.

The **vPE** performs `Reduce` into its tProperty part as a two-cycle
read-modify-write: read in the first cycle, combine and write in the second.
It can take a new update every cycle. When two updates to one row follow
each other, the second one takes the value being written instead of the stale
memory word (forwarding).

In the apply phase, one **apply unit** per front-end part sweeps that part's
Property and tProperty entries at one vertex per cycle. It writes back the
changed values and appends `{prop, ID}` to its ActiveVertex part. With the
default sizes, part `p` receives exactly the vertices with `v mod 32 = p`. The
next scatter therefore starts with vertices already spread over the offset
channels.

`higraph_ctrl` sequences the phases. A scatter phase ends when every
ActiveVertex reader has finished and every buffer, network and vPE in the
pipeline is empty.

## Top-level interface (`higraph_top`)

| Port | Use |
|------|-----|
| `alg`, `num_v`, `max_iter`, `pr_base` | run configuration |
| `start` / `done` | pulse to start a run; pulse when the run ends |
| `phase`, `iter` | current phase and the number of completed iterations |
| `host_we`, `host_sel`, `host_addr`, `host_wdata` | write one entry of the Offset, Edge, Property or tProperty array, or append to ActiveVertex; allowed only while idle |
| `host_re`, `host_rdata` | read Property or tProperty; the data arrive one cycle later |
| `host_act_clear` | empty the ActiveVertex lists |
| `perf` | event counters, listed below |

The `perf` counters are:

- dataflow-network stall cycles
- arbiter conflicts and shared reads
- replay splits and edge-network splits
- vPE forwards and vPE starvation (an idle vPE while work is still in flight)
- edges processed

To load a graph, write `Offset[0..num_v]`, the edges, `Property` and
`tProperty`. Then append the source vertex or vertices and pulse `start`.

## Departures from the published design, and what is this design's own

- **Storage widths.** Offsets are stored 23 bits wide and active entries
  carry the vertex property, so the arrays need 17.7 MiB at the defaults
  rather than 16 MB.
- **Edge weights.** These are kept in the edge word. The separate "edge info"
  memory of the published layout is not modelled.
- **Vertex programs.** The fixed-point PageRank and the saturating
  arithmetic are this design's own choices. So are the exact formulas of the
  four vertex programs.
- **Piece length.** The replay engine's "suitable length" is one Edge Array
  row. The dispatcher's all-at-once issue and the apply unit's sweep are also
  this design's own choices.
- **Scalability.** Only radix-2 switches are built. The channel counts are
  parameters, so the 64–256 channel points are reached by overriding
  `N_BE`/`N_FE`, which must be powers of two with `N_BE >= N_FE`.
- **Loading, counters and drain detection.** Host loading, the counters and
  the drain detection are additions.
- **Memories.** Memories are plain synthesizable arrays. Foundry SRAM
  macros, off-chip memory and graph slicing are not part of this RTL.
- **Timing.** No timing closure has been attempted. The published design
  runs at 1 GHz.

## Files and simulation

`rtl/higraph_pkg.sv` holds the widths, types and vertex-program functions.
Every other file in `rtl/` holds one module. `tb/tb_<module>.sv` is a
self-checking testbench for each block. Each testbench prints
`TB_RESULT checks=… failures=…` and has a watchdog.

The two system-level testbenches are:

- `tb_higraph_top`: a reduced size (4 front-end and 8 back-end channels,
  shallow FIFOs). It runs BFS, SSSP, SSWP and PageRank on a random graph with
  hub vertices, checks against a reference model, and requires every
  counted mechanism to occur.
- `tb_higraph_full`: the full default size. It runs BFS and SSSP on a
  2000-vertex graph.
- `tb_higraph_rmat`: the full default size on an RMAT graph with 16384
  vertices and 1,048,576 edges, running BFS, SSSP, SSWP and two PageRank
  iterations. It takes about a minute of simulation.

## Measured throughput

On `tb_higraph_rmat`, the default 32 + 32 channel configuration processes
about 15.5 edges per cycle in every mode. At 1 GHz that is about
15.5 GTEPS, half of the 32 edges per cycle that the back end can take at
most. That figure needs vertex IDs that spread evenly over the channels.
If the raw RMAT IDs are used, about a quarter of all updates go to the
channel that holds `v mod 32 = 0`. Its vPE then limits the whole machine to
about 4 edges per cycle. The interleaving is a plain modulo, so a graph
should be relabelled before loading when its IDs are skewed like this.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/higraph_pkg.sv \
    tb/tb_higraph_top.sv --top-module tb_higraph_top
./obj_dir/Vtb_higraph_top
```

Unused-signal warnings come from parameter combinations where a field is
not needed (for example, the dispatcher at `G = 1`).
