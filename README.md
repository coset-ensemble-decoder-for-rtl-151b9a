# Coset ensemble decoder: a clustering pipeline feeding 24 randomised forests

A surface-code memory experiment produces a stream of *defects*. A defect is a detector whose value changed between two syndrome rounds. The decoder must pair the defects up through lattice paths, which form the correction, and report only the *logical class* of that correction: how often it winds around the code in x and in y. Two corrections of the same class have the same effect on the encoded qubit.

This RTL implements a decoder built around that observation:

1. A Union-Find style **clustering engine** grows clusters around the defects until every cluster holds an even number of them.
2. Clustering reduces the problem to a small **compressed graph**. Its nodes are the defects (the cluster *roots*). Its edges are lattice paths between the regions grown from two roots, labelled with their length and winding.
3. **K = 24 independent forest explorers** each build a spanning forest of that graph under their own random priorities. Each peels its forest into a correction. This yields 24 plausible corrections of varying weight and class.
4. A **vote** keeps only the lightest candidates and returns the class most of them agree on.

An ordinary Union-Find decoder gives one arbitrary correction inside each cluster. Sampling many such corrections and voting on the class recovers much of the accuracy gap to minimum-weight matching, at Union-Find hardware cost.

Everything is synthesizable SystemVerilog-2017. There is one module per file in `rtl/` and a self-checking testbench per block in `tb/`.

## Decoding lattice and memory layout

The detector graph is a cubic lattice of `L x L x R` vertices, with L = R = 15 by default. Each vertex has six neighbours:

- x and y are periodic: the code is treated as a torus, which is where the logical classes come from.
- z (time) is open.

The clustering engine handles one vertex per cycle. For that vertex it must read the vertex itself, its six neighbours and its six incident edges in a single cycle.

All per-vertex state is spread over **22 banks** by a hash:

```
bank(x,y,z) = (x + 3y + 5z) mod 22
addr(x,y,z) = rank of (x,y,z) among the lattice points of the same bank, in x-y-z lexicographic order
```

The seven points of any neighbourhood fall in seven distinct banks. The same holds for the four edge words touched (see below). This is checked exhaustively in `tb_bank_hash` at the full size. At 15 x 15 x 15 each bank holds 153 or 154 points, so banks are 154 words deep.

The rank is computed without a divider as a sum of three table lookups, `TA[x][b] + TB[y][b'] + TC[z][b'']`. Constant functions fill the tables at elaboration from the lattice size (`bank_hash.sv`), so no data file is involved.

**Edges** are stored in the same layout, keyed by their forward endpoint (the end with the larger coordinate along the edge's axis, modulo the wrap). Each vertex owns one 6-bit word holding the 2-bit growth state (0, 1 = half grown, 2 = full) of its −x, −y and −z edges. The six edges around v are then found in the words of v, v+x, v+y and v+z, with this direction map:

| direction | word | field |
|---|---|---|
| +x | v+x | x |
| −x | v | x |
| +y | v+y | y |
| −y | v | y |
| +z | v+z | z |
| −z | v | z |

`multibank_mem.sv` is the generic crossbar: N banks, combinational reads, registered writes, one-cycle clear. It asserts that no two ports hit one bank in the same cycle. `edge_buffer.sv` (4 words per cycle) and `rid_buffer.sv` (7 words per cycle) put the hash units in front of it.

## Two-level cluster identity

Each vertex word in the RID buffer is `{owned, rid[7], wind[2], hops[6]}`:

- **rid**: the root (defect) whose growth claimed the vertex.
- **wind**: how often the path from that root to the vertex crossed the x and y seams.
- **hops**: the path length.

Roots never change once a vertex is claimed. Clusters are tracked one level up, in a small flat **RID → CID map** (`rid_cid_map.sv`) with one parity bit per cluster ID.

A merge of cluster `from` into cluster `to` does three things in one cycle:

- It rewrites every map entry equal to `from`.
- It folds `from`'s parity into `to`.
- It clears `from`'s parity.

Up to six merges per cycle are applied in order. So a merge costs a parallel compare over 128 entries instead of rewriting thousands of vertex words. `any_odd`, the OR of all parities, ends clustering.

## The seven-stage clustering pipeline

| stage | work |
|---|---|
| S1 | take a vertex from the 4-deep vertex FIFO |
| S2 | hash the neighbourhood; read 7 RID words and 4 edge words |
| S3 | map the 7 RIDs to CIDs |
| S4 | grow decision and commit (edge growth, claims, merges, compressed edges) |
| S5 | the vertex re-enters the boundary buffer if any of its edges is still unfinished; claimed neighbours go to six per-direction FIFOs (the FIFO group) |
| S6 | the FIFO controller drains one claimed vertex per cycle, lowest direction first |
| S7 | the drained vertex is written to the boundary buffer, which refills the vertex FIFO |

There are no global growth rounds. A vertex of an odd cluster grows each of its unfinished edges by one half-step per visit. It keeps circulating through the boundary buffer until all its edges are full or its cluster becomes even. When a half-step makes an edge full (`grow_decision.sv`), one of three things happens:

- **Neighbour unowned.** v claims it. The neighbour gets v's root, v's winding XOR any seam crossed, and hops + 1. The claim enters the FIFO group.
- **Neighbour owned by another cluster.** A merge `from = neighbour CID, to = v's CID` is issued. Later neighbours in the same cycle see the merged CID.
- **Neighbour owned by another root**, in the same cluster or not. S4 emits a **compressed edge**: `a = rid(v)`, `b = rid(n)`, `label = wind(v) ^ seam ^ wind(n)`, `weight = hops(v) + 1 + hops(n)`. This is the root-to-root path through that edge.

### Hazards and forwarding

Consecutive vertices are often neighbours. A vertex in S2 or S3 may therefore hold words that S4 is rewriting in the same cycle. Two mechanisms keep the pipeline full without stalls:

- **bypass_net** (`bypass_net.sv`) compares the (bank, address) of every read in S2 and S3 with every S4 write, and substitutes the newest data. There are four instances: RID and edge words, in S2 and S3.
- **CID forwarding** (`ced_pkg::fwd_cid`) applies S4's merges of the current cycle to the CIDs being latched into S3.

Cluster parity is read live in S4, never from a pipeline copy.

With both in place the pipeline halts only for backpressure (`hold`). That happens when a FIFO-group member is full, when the compressed-edge queue has fewer than 6 free slots, or when the boundary buffer has fewer than 2.

A note on robustness: a stale CID only makes a vertex skip growth once, and the vertex comes round again. Removing CID forwarding therefore costs cycles, not correctness. Removing the RID-word bypass does produce wrong corrections. `tb_ced_top` detects the latter.

## Compressed graph and the forest ensemble

Compressed edges leave S4 through a 6-push queue (`mpush_fifo.sv`) at one per cycle. They are broadcast to all 24 explorers, so adjacency building overlaps clustering.

Each explorer (`efe.sv`) keeps the edge table (256 entries) and a linked list of incident edges per node (128 nodes). Appending an edge costs one cycle.

After clustering each explorer runs on its own. It uses the priority `prio = hash(seed, instance, is_edge, id)` (`priority_gen.sv`): a 32-bit xor-shift/multiply mixer whose low 16 bits are the priority. The seed comes from an xorshift32 stream advanced once per task.

Each explorer runs three phases:

- **PICK.** Scan the nodes for the unvisited one of lowest priority. It becomes a new tree root.
- **DEQ/SCAN.** Breadth-first expansion. For the dequeued node x, walk its list repeatedly. Each walk selects the incident edge with the lowest (priority, index) above the previous pick. Edges are therefore taken in ascending priority without a sorter. An unvisited far end gets x as parent and is pushed to the BFS FIFO and to a LIFO stack recording discovery order.
- **ROE (reverse-order elimination).** Pop the stack. Every node starts odd, because every node is a defect. A node that is odd and has a parent adds its parent edge to the correction, clears its own parity and flips its parent's. The result is a correction mask, its weight (sum of path lengths) and its class (XOR of labels).

Latency per explorer is about:

```
n*(n+4) + sum over nodes of (deg+1)^2 + n cycles
```

There is one PICK scan per tree, deg+1 list walks per node, and one pop per node.

## Vote

`vote.sv` takes the 24 (weight, class) pairs. It keeps those of minimum weight, counts them per class, and picks the class with most votes. A tie goes to the lower class. It reports the first candidate of that class and weight. The output is registered one cycle after the inputs. `ced_top` then presents that candidate's edge mask.

## Top level (`ced_top.sv`) interface

| signal | dir | meaning |
|---|---|---|
| `syn_valid/syn_ready/syn_coord/syn_last` | in/out/in/in | one defect coordinate per accepted cycle; `syn_last` ends the task |
| `res_valid` | out | one-cycle pulse with the result |
| `res_logical` | out | 2 bits: bit 0 = x winding, bit 1 = y winding |
| `res_weight` | out | weight of the winning correction |
| `res_index` | out | index of the winning candidate |
| `res_votes` | out | votes for the winning class |
| `res_mask` | out | winning correction as a mask over compressed edges |
| `ce_rd_idx/ce_rd_edge`, `n_cedges`, `n_roots` | in/out | read back the compressed graph |
| `cand_weight/cand_logical` | out | all 24 candidates |
| `err_roots/err_edges/err_stuck` | out | more than 128 defects, more than 256 compressed edges, clustering could not finish |
| `stats` | out | cycle counters for issue, stalls, bubbles, each forwarding kind, merges, claims, compressed edges and multi-claims |

The task FSM runs IDLE → LOAD → CLUSTER → DRAIN → EFE → VOTE → OUT. The first defect of a task clears all memories in one cycle.

### Parameters

| parameter | default | meaning |
|---|---|---|
| `LX` | 15 | lattice side |
| `LZ` | 15 | rounds |
| `NK` | 24 | ensemble size |
| `NR` | 128 | root budget |
| `NE` | 256 | compressed-edge budget |
| `FGD` | 8 | depth of each FIFO-group member |
| `EQD` | 64 | compressed-edge queue depth |
| `SEED` | 32'h2545F491 | priority seed |

## What follows the published design and what is this design's own

These follow the published design:

- the 22-bank hash and its coefficients 1, 3, 5
- the seven-stage split
- the RID/CID hierarchy with per-CID parity
- forwarding of S4's results to earlier stages
- the per-direction FIFO group and the boundary buffer
- the compressed graph of roots
- priority-ordered forest exploration with a FIFO and a traversal stack
- reverse-order peeling
- K = 24
- minimum-weight-then-majority voting

These are this implementation's own choices:

- the in-bank address formula and its tables
- the 2-bit half-edge encoding and the edge-word keying
- the hash function behind the priorities
- linked-list adjacency with threshold selection
- the port protocol and budgets (128 roots, 256 edges)
- tie rules
- the absence of growth rounds
- folding the merge-point vertex into a labelled root-to-root edge instead of keeping it as a graph node

Known departures and limits:

- **Size is fixed at elaboration.** Another code distance d needs a rebuild with `LX = LZ = d` (tested at 5). The published design serves every d up to 15 from one build. Coordinates are 4 bits, so d ≤ 15.
- **Phenomenological lattice only.** The 6-neighbour cubic lattice with periodic x/y lacks the diagonal edges of circuit-level detector graphs and the open boundaries of a planar code.
- **No second RID→CID lookup after the FIFO group.** The published pipeline draws one there. The lookup is unnecessary here because S3 resolves the CID again when the vertex is re-dispatched.
- **Every compressed edge is kept.** The published scheme also prunes redundant edges between the same pair of roots; that pruning is not built here. Each full lattice edge between two root territories is stored, including parallel ones. Syndromes shaped like real errors (defect pairs) stay far inside the 256-edge budget. Dense, uniformly random defect sets make clusters touch along long fronts and can overflow it, which `err_edges` flags.
- **No reduced-stall variant.** The published work reports a residual stall from a parity read-after-write hazard. Here parity is read live in S4, so no such stall exists.

## Verification

Every block has a self-checking testbench printing `TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_bank_hash` | exhaustive over 15³: exact bank and in-bank rank for every point, address < depth, seven distinct banks in every neighbourhood |
| `tb_edge_buffer`, `tb_rid_buffer` | random multi-port traffic against an array model, including clear and top-layer ports |
| `tb_rid_cid_map` | random merge bursts against a map-and-parity model |
| `tb_bypass_net` | newest-writer-wins forwarding against a reference |
| `tb_grow_decision` | 20 000 random neighbourhoods against a reference of the growth rules; directed seam and duplicate-merge cases |
| `tb_sync_fifo`, `tb_mpush_fifo`, `tb_fifo_group` | queue models |
| `tb_priority_gen` | hand-worked known answers, avalanche, bit balance, decorrelation between instances |
| `tb_efe` | 400 random multigraphs against a reference of forest building and peeling; odd degree at every node of each even component; a latency bound |
| `tb_vote` | directed and random candidate sets against a reference |
| `tb_ced_top` | end to end at 5×5×5 with small FIFOs (see below) |
| `tb_ced_full` | the top at every default (15×15×15, 128 roots, 256 edges, 24 explorers); known cases plus syndromes built from 4–10 random single-edge errors; takes well under a minute |

`tb_ced_top` runs 5 hand-made tasks with known answers and 60 random ones. Every result is checked without reference to the design:

- each defect has odd degree in the chosen correction;
- the class is the XOR of the labels and the weight is their sum;
- each compressed edge is at least the torus distance between its roots, and its weight parity agrees with its winding;
- the vote is recomputed from the candidates.

It also fails unless these mechanisms all occur at least once: edge, RID and CID forwarding, merges, multi-vertex claims, pipeline stalls, candidates of unequal weight, and candidates of different class.

To run one:

```
verilator --binary --timing --assert -Irtl rtl/ced_pkg.sv tb/tb_ced_top.sv --top-module tb_ced_top -o sim
./obj_dir/sim
```

Elaborating `bank_hash` at 15×15×15 evaluates the address tables with constant functions. This makes synthesis front ends slow, taking a few minutes, though simulation builds are quick.
