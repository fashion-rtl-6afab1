# Fashion: a mesh network-on-chip that finds its own faults and routes around them

Permanent faults in a large mesh network-on-chip break links and routers, split the network into pieces and leave routing tables pointing into dead hardware. Adding a fixed turn rule (west-first, odd-even and so on) keeps routing deadlock-free in a healthy mesh, but it fails once the topology becomes irregular.

The Fashion router adds a **Self-Awareness Module (SAM)** to a conventional virtual-channel wormhole router. The SAMs of all routers work together, using only messages between neighbours, to:

1. **Test the links.** Each SAM tests every link to a neighbour and keeps a *neighbour list table* that says which neighbours can be reached.
2. **Map the connectivity.** A *distributed depth-first search* (DFS) starts at one root router, the system manager. It finds the largest connected part of the network, the *maximal connected subgraph* (G^max). It also classifies the *cut elements* of G^max:
   - a *cut vertex* is a router whose loss splits the network;
   - a *bridge* is a link whose loss splits the network.
3. **Make routing deadlock-free.** Repeated pruning rounds, each followed by a new DFS, forbid turns until no cycle of channel dependencies is left inside G^max. G^max still stays connected.

Routers outside G^max are taken out of service. Software can then fill the per-router routing tables using only the turns the SAMs still permit.

This repository holds the SystemVerilog for:
- the router (`fashion_router`) and its SAM (`sam`);
- the root-side sequencer (`sam_manager`);
- an 8x8 mesh top (`fashion_mesh`) with fault-injection inputs.

## The mesh and its conventions

- Node `n` sits at `x = n % COLS`, `y = n / COLS`.
- Port numbering is shared by every module (`fashion_pkg`): `N=0, S=1, W=2, E=3, L=4` (L is the local processing element).
  - North is `y+1` and south is `y-1`.
  - West is `x-1` and east is `x+1`.
- Flits (`flit_t`) carry:
  - head and tail bits;
  - a 2-bit virtual-channel (VC) number;
  - 8-bit destination and source ids;
  - a 64-bit payload.
- A physical channel is a `link_t`, which is `{valid, test, flit}`, plus a backward `credit_t`, which is `{valid, vc}`.
- Each direction also has a small SAM sideband, `sam_link_t`. It carries:
  - the neighbour's status: in service, present (not pruned), visited, depth;
  - a one-cycle DFS token, which is a forward or backward message with a value and a counter.

Defaults: 8x8 mesh, 5 ports, 4 VCs per port, 8 flits per VC, 64-bit data.

## The router datapath

`fashion_router` is an input-queued router with four stages:
1. **Route computation (RC).** A table lookup.
2. **VC allocation (VA).** `vc_allocator`: one round-robin arbiter per output, which grants the lowest free output VC.
3. **Switch allocation (SA).** `switch_allocator`: separable and input-first, with round-robin at both levels.
4. **Switch traversal (ST).** `crossbar` followed by an output register.

Other details:
- Each input VC is a `vc_buffer` FIFO of 8 flits. Flow control uses one credit per flit.
- Zero-load latency is 4 cycles, from a head flit entering an input buffer to it appearing on the output link.

Routing is **table-based per node** (`route_computation`):
- The table is indexed by the input port and the destination, and returns an output port.
- Software writes it through the `cfg_*` port.
- Every lookup is checked against two things:
  - the neighbour being usable (`route_valid`);
  - the SAM's turn table, `permit[from][to]`, which always forbids U-turns.
- A lookup that breaks either rule is still forwarded, so a wrong table never stalls the network silently. It is counted in `rc_violations`.
- The mesh testbench requires zero violations.

Two inputs from the manager freeze the datapath:
- `stall`: no flit is switched while the SAM works.
- `bist_mode`: the four mesh outputs carry link-test words instead of flits.

## The Self-Awareness Module

`sam` joins three units around the neighbour list table. The table has one row per direction with four columns:
- **valid**: the link passed its test and the neighbour is still present;
- **parent** and **child**: DFS-tree edges;
- **bridge**: a bridge edge, set at the parent end.

### Link test (`bist_unit`)

- Each router sends a 32-bit LFSR signature on all four links in the top half of the data word.
- In the bottom half it echoes the word it last received from that neighbour.
- A link passes if `MATCH_NEED` (8) consecutive echoes match what was sent, within `TEST_CYCLES` (32).
- Silence or wrong echoes fail the link.
- `done` comes `TEST_CYCLES+2` cycles after `start`.
- A dead router fails all of its links, because it echoes nothing.

### Distributed DFS (`self_monitoring_unit`)

This is the core of the design. Each node holds:
- `depth`: its distance in the DFS tree from the root;
- `low`: the smallest depth reachable from its subtree through one back edge;
- a `counter` of nodes visited so far.

How a round runs:
1. `dfs_start` resets every node to unvisited, with depth and low at "infinity" (`NODES`).
2. The root gives itself depth 0 and counter 1.
3. A node holding the token offers it to its unvisited usable neighbours one at a time, in the fixed order **W, S, E, N**. The forward token carries `{depth, counter}`.
4. A newly visited neighbour sets its depth to the sender's depth plus one, records the parent direction and explores in turn.
5. When a node runs out of unvisited neighbours, it:
   - sets `low` to the minimum of its own depth, the depths of its visited non-parent neighbours (seen on the sideband) and its children's `low`;
   - returns a backward token `{low, counter}` to its parent.
6. When the parent gets the backward token from child `j`, it:
   - takes `low = min(low, j.low)`;
   - marks itself a cut vertex if it is not the root and `depth <= j.low`;
   - marks the edge to `j` as a bridge if `depth < j.low`.

   The root is a cut vertex if it has two or more children.
7. A round costs about two cycles per tree edge. The root's `root_done` ends it, and the root's counter is then the size of the reached component.

The testbench reproduces a published 11-node example exactly. It checks:
- depth and low of every node;
- cut vertices B, C and D;
- bridges B-C, C-D and D-H;
- two nodes that are never reached.

It also compares 12 random graphs with a reference DFS and a brute-force search for cut vertices and bridges.

### Pruning to a deadlock-free turn model (`self_reconfiguring_unit`)

- The unit sums the valid bits into the node's degree, with flags for degree 1 and degree 2.
- After the first round, nodes that were not visited are set out of service.
- Each later round ends with a `prune` pulse. On that pulse, a node that is visited, not the root, not a cut vertex and a **leaf of the current DFS tree** is **removed**.
  - It forbids every turn between any two of its valid neighbours.
  - It stops counting as present to them, so the next DFS round runs without it.
- Rounds go on until the root counts two or fewer nodes, or a round removes nothing.

**Why this makes routing deadlock-free.** Removing a non-cut node never disconnects the rest, so every remaining pair of nodes keeps a path. A cycle of channel dependencies has to turn at the removed node with the largest removal order, and that turn is forbidden there.

**Departure from the original rule.** The original description removes, in each round, the tree leaves (without restricting their turns) together with *all* non-cut nodes of minimal degree (2 in a mesh), forbidding turns only at the latter. Here a removed leaf forbids its turns, since a DFS-tree leaf can still have several mesh neighbours. Removing all minimal-degree nodes at once is unsafe: it can disconnect the network: three degree-2 non-cut nodes on one 4-cycle removed together isolate the fourth. This design therefore removes only DFS-tree leaves in each round. Two leaves of a DFS tree are never adjacent, so removing several at once is the same as removing them one after another, and the argument above holds. The degree-1 and degree-2 flags are still computed and exported.

**Turn restrictions versus routing.** A removed node keeps forwarding traffic. It is pruned only from the *DFS* graph, and the turns it forbids limit the routes through it. The router therefore checks routes against `route_valid` (link passed and neighbour in service), not against the pruned `valid` bit.

### The manager (`sam_manager`)

- It sits at the root and drives global control wires to all SAMs.
- The sequence is:
  1. BIST, with `bist_mode` set;
  2. a clear of the turn tables (`reconf_start`);
  3. three settle cycles, so neighbours see the cleared status;
  4. DFS rounds, each ended by `round_end`, with a `prune` between rounds.
- A run starts on `os_start` or on a `PERIOD` timer. `PERIOD=0` means request only.
- `busy` stalls traffic for the whole run.
- Results:
  - `gmax_size`: size of the first-round component;
  - `rounds`;
  - `cycles`;
  - `error`: a DFS round exceeded `DFS_TIMEOUT`.

## Top level and timing

`fashion_mesh` instantiates `ROWS x COLS` routers and one manager. `root_id` selects the manager node.

Fault injection:
- `link_fault[n][d]` forces to zero every wire leaving node `n` in direction `d`: data, credits and sideband.
- `node_fault[n]` does the same for all of node `n`'s outputs.

Per-node outputs:
- classification: `cut_class`, `bridge_class`;
- `removed`, `out_of_service`;
- the turn table `permit`;
- the valid bits;
- `rc_violations`.

Measured reconfiguration times with faults:
- 4x4 meshes: 11 to 15 rounds, 353 to 585 cycles.
- 8x8 meshes (62 and 64 nodes in G^max): 50 to 57 rounds, 5.6k to 7.0k cycles.

The original leaf-and-degree rule reports about 706 cycles on 8x8 and 1384 on 16x16, so this design is roughly eight to ten times slower to reconfigure. Leaf-only pruning removes only a few nodes per round and needs a full DFS after each round. That is the price paid for guaranteed connectivity. Traffic is stalled only while a run is in progress.

## Verification

Each block has a self-checking testbench in `tb/` that prints `TB_RESULT checks=N failures=M`:
- **FIFO, crossbar, allocators, route table:** random stimulus against a reference model.
- **Link test:** a good link, a silent link and a corrupting link, with the `TEST_CYCLES+2` latency.
- **DFS:** the published example and random graphs.
- **Pruning:** the removal rule and turn masks.
- **Manager:** the sequencing, stop rules, timeout and period timer.
- **SAM:** three SAMs in a line, with and without a broken link.
- **Router:**
  - its neighbours are modelled by BIST units so the link test really runs;
  - random multi-flit traffic with slow sinks;
  - packet integrity, zero-load latency, stall and a U-turn violation.

`tb_fashion_mesh` runs a 4x4 mesh through three fault scenarios: one hand-made and two random. For each it checks:
- G^max size and out-of-service nodes, by reachability;
- cut vertices and bridges, by brute force;
- that the channel dependency graph under the resulting turn tables is acyclic;
- that every connected pair still has a turn-legal route.

It then programs turn-legal shortest routes and sends random 8-flit packets, checking delivery, order and content. It fails if any of these never happens: a link fault, a cut vertex, a bridge, an out-of-service node, a multi-round run, a forbidden turn, a removed node, backpressure or a re-run.

`tb_fashion_mesh_full` does the same on the default 8x8 top with no parameter overrides, over two scenarios. The run takes about 30 s, but the C++ build of 64 routers takes over ten minutes on one core.

To simulate, for example, the router:

    verilator --binary --timing --assert -Irtl rtl/fashion_pkg.sv rtl/*.sv tb/tb_fashion_router.sv --top-module tb_fashion_router
    ./obj_dir/Vtb_fashion_router

Put `rtl/fashion_pkg.sv` first; duplicate file names on the command line are harmless. `tb_fashion_mesh` and `tb_fashion_mesh_full` also need `tb/mesh_env.sv`, which is picked up via `-Itb`.

## What is not here

- **Processing elements and the operating system.** Only their ports are present: injection and ejection links, the table-write port and `os_start`.
- **Routing-table computation.** This is software's job. The testbench computes turn-legal shortest paths.
- **The "Ex" variant.** This router variant adds bidirectional links and a unified VC buffer pool, which come from other published designs, and it is not built.
- **Recovery of in-flight packets when a fault appears mid-run.** Traffic is simply stalled during reconfiguration.
- **Router-internal self-test.** Only links are tested, and a faulty router is seen as four failed links.
