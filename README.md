# Local Clustering Decoder in SystemVerilog

This is a hardware decoder for the surface code. It takes the syndrome of a
window of `d` rounds of error correction and groups the defects into
clusters. Every cluster it leaves behind holds an even number of defects or
touches an open boundary of the code. It also takes hints at run time: when a
qubit is seen to have leaked, edges of the decoding graph near that qubit can
be marked as likely errors before decoding starts. The clustering then begins
from those pre-grown edges.

The design follows the architecture of the Local Clustering Decoder (LCD)
paper, "Local Clustering Decoder as a fast and adaptive hardware decoder for
the surface code". It has two engines:

* The **decoding engine** lays the decoding graph onto a two-dimensional
  array of small processing elements (PEs). It runs a distributed union-find
  style clustering on that array.
* The **adaptivity engine** keeps a precomputed map from trigger events
  (heralded leakage of qubit `q` in round `r`) to sets of edges. It streams
  those edges into the decoding engine.

The default build is the paper's largest configuration. It covers distance
17, with 324 PEs of 8 vertices each, 2592 vertices in all.

Peeling is not included. Peeling turns the final clusters into a correction.
The decoder outputs every vertex's final record (cluster index, parent
pointer, radius), which is what a peeling stage needs.

## The decoding graph and how it is cut into PEs

The graph is the unweighted Z-type decoding graph of a rotated distance-`D`
surface code with *patch wiggling*, stacked over `D+1` layers. Patch wiggling
means the syndrome-extraction schedule is mirrored every round, so hook edges
change direction from one round to the next. `lcd_pkg` computes it at
elaboration time from `D` alone. No table is stored.

* A layer is drawn as a diamond of `NC = D+1` columns. Each column holds
  `NV = (D-1)/2 = floor(D/2)` vertices.
* Vertex `j` of column `c` sits at level `l = D-2-2j-(c mod 2)`.
* Vertex ids are `(t*(D+1)+c)*NV + j`, where `t` is the layer.
* One PE holds one column of one layer. The PE array is therefore
  `(D+1) x (D+1)`: columns along one axis, layers along the other.

Each vertex has up to twelve neighbours, addressed by a 4-bit *slot*:

| slot | neighbour |
|------|-----------|
| 0, 1, 2, 3 | same layer: `(c+1,l+1)`, `(c+1,l-1)`, `(c-1,l+1)`, `(c-1,l-1)` |
| 4, 5 | same vertex one layer up / down (timelike) |
| 6, 7, 8 | hook edges to layer `t+1`: `(c+s,l+1)`, `(c+s,l-1)`, `(c+2s,l)` |
| 9, 10, 11 | the same three hook edges seen from layer `t+1` back to `t` |
| 12 | the virtual boundary (vertices at level 0 or level `D-2`) |
| 15 | self (the parent pointer of a cluster root) |

The hook direction `s` is `-1` for even `t` and `+1` for odd `t`. This is the
wiggling: the hook links between PEs reverse direction every layer. Slots
`k` and `rev_slot(k)` name the same edge from its two ends (0/3, 1/2, 4/5,
6/9, 7/10, 8/11). The forward slots 0, 1, 4, 6, 7, 8 and 12 own the edge. An
edge is identified by `{owner vertex, forward index 0..6}`. This id is used
by the adaptivity map and by the pre-grown bit set.

Every edge has weight 2, as in the unweighted graphs of the paper. The
support of an edge is not stored. It is the sum of the radii of its two
endpoints, so an edge is *fully grown* once the radii sum to 2. A boundary
edge counts the boundary as radius 0, so it is fully grown once the vertex
radius reaches 2. An edge is *accessible* if both endpoints are enabled and
it is fully grown or pre-grown.

The layer layout, the vertex numbering inside a PE and the PE-to-PE links
follow the paper's d = 5 example. The paper shows only which PEs are linked.
The exact vertex endpoints of the hook edges, and which vertices touch the
boundary, are this design's reading of the surface-code geometry.

## Vertex records

Each vertex carries a 23-bit record (`lcd_pkg::vertex_t`):

* `cindex` (13 bits): the cluster the vertex belongs to.
  * It is `{1, index}` for a cluster whose lowest vertex index is `index`.
  * It is `0` for a cluster that reached the boundary.
  * Since the boundary holds the lowest index of all, a cluster that touches
    it adopts it when it merges. Such a cluster becomes neutral without any
    special case.
* `parent` (4 bits): a neighbour slot. It is 15 for a root and 12 when the
  parent is the boundary.
* `radius` (2 bits): grows while `radius <= w_max = 2`, so it stops at 3.
* `defect`, `parity`, `active`, `busy`: as in the union-find algorithm.
  * Parity of a root is the parity of its cluster.
  * Active vertices grow.
  * Busy means a field changed and the stage must run again.

## Stages and the controller

`lcd_controller` runs this state machine:

```
start -> INITING --(pre-grown set empty)--> GROWING -> MERGING -> PICKING -> SYNCING
                 \--(pre-grown set not empty)------------^                     |
             exit when no vertex is active <-------------------------------------+
             (otherwise back to GROWING)
```

* After a pass over MERGING or SYNCING, the same stage runs again if any
  vertex is busy.
* Starting in MERGING when pre-grown edges exist is the *pre-clustering* step.
  The pre-grown edges are joined into clusters before anything grows.

The stage kernels are applied per vertex:

* **growing**: an active vertex with `radius <= 2` grows by one.
* **merging**:
  * Take the lowest `cindex` among the accessible neighbours, counting the
    boundary as 0.
  * If it is lower than the vertex's own, adopt it, point `parent` at that
    neighbour and set `busy`.
  * Then, if the vertex has odd parity and is not a root, flip the parent's
    parity, clear its own and set `busy`.
  * Odd parity therefore travels up the tree to the root, or into the
    boundary, where it is absorbed.
* **picking**: `active <= parity`.
* **syncing**: an inactive vertex with an active accessible neighbour becomes
  active and busy.
  * Activity therefore spreads from the root to the whole of an odd cluster.
  * Even and boundary clusters stop growing.

A PE runs a kernel only on its vertices that are *in a cluster*: a defect,
or a vertex with an accessible edge. It takes one vertex per clock cycle,
lowest index first, and skips the rest. Below threshold most vertices are
skipped, which is where the speed comes from.

## Parts and time slots: how the PEs share the network

In merging and syncing a vertex reads its neighbours and may flip a
neighbour's parity. Two PEs working at once must never touch the same
neighbour. The PEs are therefore grouped into **parts**:

* A part is a 3 x 3 block of the array: 3 columns by 3 layers.
* Inside the block, each PE has its own time slot, `3*(t mod 3)+(c mod 3)`.
* All parts use the same slot layout. Two PEs with the same slot in different
  parts are therefore at least three links apart, however the hook links run.

Stages run in one of two ways:

* **Serial stages (merging, syncing).**
  * The controller issues slots 0 to 8 in turn. Each slot goes to every part
    at once, and the controller waits until all parts report done.
  * Each part then starts only the PE of that slot.
  * The kernel lives once per part (`lcd_part`). The running PE presents its
    current vertex, the vertex's neighbour records and its accessible slots.
    In the same cycle the part returns the new record and, if needed, a parity
    flip aimed at one slot.
  * The network routes the flip to the PE that owns the target vertex.
* **Parallel stages (growing, picking).** These need no neighbour, so one
  pulse starts every PE at once and each PE uses its own small kernel.

At `D = 17` there are 36 parts. At `D = 5` there are 4 parts of 9 PEs. In
the paper's d = 5 example the parts are drawn as colour classes. The block
shape and the slot order are this design's.

## The network

`lcd_noc` is the decoding graph turned into wires:

* For every vertex and slot, a generate loop connects the neighbour's record
  from the PE that holds it.
* It computes accessibility: both endpoints enabled and either the radius sum
  is at least 2 or the edge is pre-grown.
* It routes parity flips.
* It holds the pre-grown set: one bit per edge, set by `pg_valid_i/pg_edge_i`
  and cleared by `pg_clear_i`.
* It applies the **vertex-enable mask**. A vertex switched off makes all its
  edges inaccessible. This lets one build run a sub-graph of its compiled
  graph, window by window.

The paper generates its network module from the graph with a separate tool.
Here the same result comes from generate loops over the package functions.
The links are plain wire bundles: a neighbour is read, and a flip delivered,
within the same cycle. There are no packets or buffers.

## The adaptivity engine

The map is loaded once through `cfg_*`:

* `cfg_sel_i=1` writes `cnt_mem[trigger]`, the number of edges of that
  trigger.
* `cfg_sel_i=0` writes `edge_mem[trigger*MAXE + i]`, the `i`-th edge id.

Triggers are numbered `round * (2D^2-1) + qubit`. There are `D+1` rounds per
window and `2D^2-1` physical qubits per patch, giving 10386 triggers at
`D = 17`.

Each trigger is taken on a valid/ready handshake. The engine reads the count
and sends the edges one per cycle on `pg_valid_o/pg_edge_o`. The first edge
is valid at the third clock edge after the trigger is taken, and the engine
takes the next trigger only after the last edge. The decoding engine keeps
one bit per edge, so an edge sent twice is harmless. The union over all
triggers is the pre-grown set of the window.

The map contents come from an offline analysis of the circuit: the edges
whose error mechanisms become likelier if the measured qubit had leaked.
That analysis is not part of this hardware.

The choices below are this design's. The paper says only that the map is
precomputed and addressed by the triggers.

* At most `MAXE = 16` edges per trigger. Larger counts are clamped.
* The two-memory layout.
* The trigger numbering.

## Using the top level (`lcd_top`)

1. Load the adaptivity map through `cfg_we_i/cfg_sel_i/cfg_addr_i/cfg_data_i`.
2. For each window:
   1. Pulse `pg_clear_i`.
   2. Offer the window's triggers on `trig_valid_i/trig_id_i` (handshake with
      `trig_ready_o`).
   3. Wait for `adapt_idle_o`.
3. Drive `syndrome_i` (one bit per vertex) and `vertex_en_i`, and pulse
   `start_i`. Both are sampled at `start_i`.
4. Wait for the `done_o` pulse.
5. Read the results:
   * `state_o[v]` holds the final records.
   * `cycles_o` holds the decode time in clock cycles.
   * `grow_cnt_o`, `merge_cnt_o`, `merge_rerun_cnt_o`, `sync_rerun_cnt_o`
     and `preclustered_o` describe the run.

All resets are asynchronous and active low. Every module has a default for
every parameter. `D` (default 17) sets the code distance and with it every
size. `MAXE` (default 16) sets the edges per trigger.

| D | PEs | vertices | parts | triggers |
|---|-----|----------|-------|----------|
| 5 | 36 | 72 | 4 | 294 |
| 17 | 324 | 2592 | 36 | 10386 |

## Timing

| Operation | Time |
|-----------|------|
| PE pass | one cycle per in-cluster vertex, plus about two cycles of handshake |
| Serial stage pass | nine such slot steps, each waiting for the slowest part |
| Parallel stage pass | one step |
| Adaptivity engine | one edge per cycle, after a 3-cycle start |

The paper reports these per-round decoding times on an FPGA:

* 0.12 to 0.15 µs at d = 5 and 400 MHz;
* 0.46 to 0.68 µs at d = 17 and 285 MHz.

Both are under its 1 µs-per-round target. The testbenches measure this
design's cycle counts and check them against the same 1 µs budget:

| Testbench | Setup | Mean cycles per round | Time per round |
|-----------|-------|-----------------------|----------------|
| `tb_lcd_decoding_engine` | d = 5, 1.5% per-edge error rate | about 95 | 0.24 µs at 400 MHz |
| `tb_lcd_top` | d = 5, 1% and 4% per edge, plus leakage | about 146 | 0.37 µs at 400 MHz |
| `tb_lcd_top_full` | d = 17, 0.2% per edge | about 117 | 0.41 µs at 285 MHz |

The error rates are heavier than the paper's noise models, so these figures
are not a like-for-like comparison. No clock frequency is claimed for this
RTL; it has not been placed and routed.

## Where this design departs from the paper, or fills a gap

* **Graph geometry.**
  * The vertex-level endpoints of hook and boundary edges are derived here.
  * The graph has `D+1` layers: `D` rounds plus the final readout layer.
  * The marks of which boundary edges flip the logical observable are not
    kept, since peeling is not built.
* **Memories.** PE memories are register files whose records are all visible
  to the network at once, and the network is combinational. A real build
  would likely pipeline the links; the stage handshakes leave room for that.
* **Partition.** The 3 x 3 part shape and the slot order are this design's.
  The paper gives the rule they satisfy (PEs of the same slot at least three
  links apart) and a d = 5 example.
* **Merging kernel.** The kernel does the parity push once, after choosing
  the lowest index. The paper's pseudo-code does it inside the loop over
  neighbours; the result is the same.
* **Syndrome input.** The syndrome of a window is taken as one parallel word
  at start. Streaming rounds in as they are measured is not modelled.
* **Adaptivity map.** The map format, the MAXE bound, the trigger numbering
  and the `adapt_idle_o` handshake are this design's.
* **Counters.** Stage-pass counters and a cycle counter are added for
  measurement.
* **Not built.**
  * Peeling and the logical-observable flip.
  * The offline tools that compile a circuit into the graph and compute the
    leakage map.
  * Weighted graphs. Their radii and thresholds would need more bits; the
    paper's results are unweighted too.

## Verification

Each block has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=N failures=M` line and has a watchdog.

`lcd_ref_pkg` is an independent behavioural reference. It shares only the
graph functions. It finds the connected components of the accessible edges
and grows every odd component that is not on the boundary by one step, until
none is odd. It then gives each vertex the cluster index and radius it must
end with.

| Testbench | Size | What it checks |
|-----------|------|----------------|
| `tb_lcd_pe` | D = 9, 4 vertices | Init values. The walk over in-cluster vertices, one per cycle; start to done takes `n+3` cycles for `n` vertices. Grow and pick kernels. Write-back and flip requests. Incoming flips. |
| `tb_lcd_noc` | D = 5 | The 15 spatial edges of a d = 5 layer and maximum degree 12. Hook links PE5 -> PE10/PE9 in both wiggle directions. Accessibility from radii, pre-grown edges, the boundary and disabled vertices. Pre-grown clear. Flip routing. |
| `tb_lcd_part` | D = 7, an edge part | PE starts in both stage kinds. Empty slots. The merging and syncing kernels against a model, on random views. |
| `tb_lcd_controller` | 4 emulated parts | The stage sequence against the transition rule. Re-runs. Slot order. The slot handshake. Counters. |
| `tb_lcd_adaptivity_engine` | D = 5, random map | Exact edge stream per trigger. First edge at the third clock edge, then one per cycle. No trigger taken while busy. Empty and clamped entries. |
| `tb_lcd_decoding_engine` | D = 5 | The paper's worked FSM example: a pre-grown edge 0-2 and defects 2, 4, 5, checked after the second picking stage. 300 random windows with and without pre-grown edges and disabled vertices, compared record by record with the reference. Time per round. |
| `tb_lcd_top` | D = 5, 120 windows | End to end through the adaptivity engine, with a synthetic leakage map and extra errors on heralded edges. Every record is compared with the reference. It counts pre-clustering, growth, merging re-runs, syncing re-runs, boundary clusters, disabled vertices and empty map entries, and fails if any never happens. |
| `tb_lcd_top_full` | defaults (D = 17) | Three windows at full size, compared with the reference, with the 285-cycle-per-round budget. |

To run a testbench with plain verilator, list the package files first:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/lcd_pkg.sv tb/lcd_ref_pkg.sv tb/tb_lcd_top.sv --top-module tb_lcd_top
./obj_dir/Vtb_lcd_top
```

Run times and sizes:

* The D = 5 testbenches build and run in well under a minute each.
* `tb_lcd_top_full` takes about ten minutes to build (the full network is
  about 2592 x 12 record links) and two to three minutes to run.
* Yosys coarse synthesis of the full D = 17 top does not finish within ten
  minutes. The smaller blocks synthesise quickly.
