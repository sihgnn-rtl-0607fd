# SiHGNN frontend: semantic graph reuse and bipartite graph restructuring in RTL

Heterogeneous graph neural networks (HGNNs) do not run on the raw
heterogeneous graph. They first build *semantic graphs*: for a *metapath*
such as author → paper → author ("APA", co-authorship), the semantic graph
joins every author to every author reachable along that path. Two costs
dominate this front end:

* **Building semantic graphs repeats work.** APSPA and APSPP both contain
  APSP. Concatenating one-hop relations from scratch for every metapath
  recomputes the shared prefix every time.
* **Semantic graphs have poor locality.** Each one is bipartite (sources of
  one vertex type, destinations of another), and aggregating over it in
  edge order makes the feature buffer of the downstream accelerator thrash.

This RTL implements the two units that attack these costs:

1. **Semantic Graph Builder.** It keeps every metapath built so far in a
   *Callback Trie Tree* (CTT). When a new metapath is requested, it returns a
   *generation list*: the shortest sequence of already-built semantic graphs
   whose concatenation gives the new one. Example: APSPA = APS ⋈ SP ⋈ PA.
2. **Graph Restructurer.** It receives one bipartite semantic graph and finds
   a maximum matching (*decoupling*). From the matching it picks a
   *backbone*, which sorts every vertex into one of four classes
   (*recoupling*). It then re-emits the edges grouped into three subgraphs
   with tight communities.

The host processor, the memory controller with its HBM, and the HGNN
accelerator that consumes the regrouped edges are not part of this RTL.
Their connections are ports of the top module `sihgnn_top`.

```
sihgnn_top
├── semantic_graph_builder        metapath in, generation list out
│   ├── ctt_buffer                trie node store, 2 read ports + 1 write port
│   └── ctt_matcher               comparator / AND / pointer mux
└── graph_restructurer            edge stream in, classes + 3 subgraphs out
    ├── topology_loader           edge list and adjacency build control
    ├── adj_buffer  (x2)          source-side and destination-side CSR
    ├── decoupler                 maximum matching (search list = sync_fifo)
    └── recoupler
        ├── candidate_buffer      matched pairs
        ├── backbone_searcher     Src_in / Src_out / Dst_in / Dst_out
        ├── sync_fifo (x4)        one FIFO per vertex class
        └── graph_generator       three-pass subgraph emitter
```

`sihgnn_pkg` holds the shared constants and types: vertex type, CTT pointer,
CTT node, generation-list element and subgraph id.

---

## 1. The Callback Trie Tree

### Idea

Every built metapath is a path from the root of a trie whose levels are
vertex types. Level 1 has one node per vertex type. The relation A→P is the
node P below A, and APS is the node S below that. A node that stands for a
semantic graph already built is *stored* (`is_sg`). Every node also has a
*callback pointer* to the level-1 node of its own type.

To decompose a new metapath, walk down from the level-1 node of its first
type for as long as the trie matches it. Remember the deepest stored node
passed. When the walk cannot go deeper, the path from level 1 to that stored
node becomes one element of the generation list. Then jump through its
callback pointer to level 1 and continue from the same vertex type. The
pieces share their joining type, and that type is where two semantic graphs
are concatenated.

Worked example (ACM types A, P, S, T). The trie holds AP, PA, PS, SP, APS,
PAP and APA, all stored. Request APSPA:

| step | CP (node)  | next type | child exists? | action                                   |
|------|------------|-----------|---------------|------------------------------------------|
| 1    | A (lvl 1)  | P         | yes, stored   | go down, deepest stored = AP             |
| 2    | AP         | S         | yes, stored   | go down, deepest stored = APS            |
| 3    | APS        | P         | no            | emit APS (positions 0..2), callback → S  |
| 4    | S (lvl 1)  | P         | yes, stored   | go down, deepest stored = SP             |
| 5    | SP         | A         | no            | emit SP (2..3), callback → P             |
| 6    | P (lvl 1)  | A         | yes, stored   | go down; end of path: emit PA (3..4)     |

APSPA itself is then inserted (new node A below APSP) and marked stored, so a
later APSPAP can reuse it.

### Node word and memory layout

One node is 26 bits. With the default of 4 vertex types and 11-bit pointers:

| field        | bits | meaning                                           |
|--------------|------|---------------------------------------------------|
| `valid`      | 1    | slot holds a node                                 |
| `is_sg`      | 1    | node is a stored semantic graph                   |
| `data`       | 2    | vertex type of this node                          |
| `next_p`     | 11   | base of this node's child block, 0 = no children  |
| `callback_p` | 11   | level-1 node of the same type                     |

All children of a node share one *child block* of `NUM_TYPES` consecutive
words, and the child of type `t` lives at `next_p + t`. Finding the child is
therefore one addition, not a list search. Words 0..3 are the level-1 nodes.
Word 0 can never be a child block, so `next_p = 0` can mean "no children".
A bump allocator hands out new blocks from word 4 upward. Nothing is ever
freed.

The default depth of 1572 words is the 5 KB budget divided by 26 bits. That
gives 392 child blocks after level 1. A k-hop metapath costs at most k−1 new
blocks beyond those of its first hop, and usually fewer because metapaths
share prefixes.

### Matcher

`ctt_matcher` is purely combinational. It reads the node at CP (`cur`), the
word at `cur.next_p + next_type` (`child`), the next candidate type, and
whether there is one. It raises `advance` when the child is valid, holds
that type, and the current node has children. `next_cp` is then the child;
otherwise it is `cur.callback_p`. The CTT buffer has two combinational read
ports, so the builder looks at a node and its candidate child in the same
cycle.

### Builder state machine and protocol

`semantic_graph_builder` runs these states: `S_INIT` (writes the four
level-1 nodes, one per cycle after reset), `S_IDLE`, `S_DEC` (walks one level
per cycle), `S_EMIT` (holds one generation-list element until accepted),
`S_INS` (inserts the metapath one level per cycle, allocating blocks) and
`S_DONE` (one-cycle pulse).

* **Request.** `req_valid/req_ready`, `req_path[0..MAX_LEN-1]` (types, first
  type at index 0), `req_len` (number of types, 2..10) and `req_build`.
  - With `req_build = 1` the builder decomposes the path, then stores it.
  - With `req_build = 0` it only stores the path. This is how the one-hop
    relations are loaded at start-up.
* **Generation list.** `gl_valid/gl_ready`. Each element gives the stored
  node (`sg_node`) and the first and last positions in the request;
  `gl_last` marks the final one. `gl_elem` is held while `gl_ready` is low.
* **Done.** A one-cycle `done` pulse. `done_sg_node` is the node that now
  names the new semantic graph. `done_err` is raised for a bad length, for a
  hop with no stored relation (no list can be made), or for a full CTT.

Timing without back-pressure: one cycle per level walked, one per list
element, then one per type stored plus one per new child block.

One deliberate difference from a leaf-only reading of the method: the
builder reuses the *deepest stored node it passed*, not only leaves. After
APS is inserted under AP, AP is an inner node but is still a stored semantic
graph. A later request APA walks A → AP, finds no A below AP, and
still emits AP (then PA through the callback) instead of failing.

---

## 2. Restructuring a bipartite semantic graph

### Why four classes give three communities

Take a maximum matching M of the bipartite graph. A source vertex is
*matched* if an edge of M touches it; the same holds for destinations.
The backbone rules are:

* A matched source with at least one unmatched destination neighbour is
  **Src_in**, and those unmatched neighbours are **Dst_out**.
* Then, a matched destination with at least one unmatched source neighbour
  is **Dst_in**, and those unmatched neighbours are **Src_out**.
* Every vertex not classified yet is Src_out (sources) or Dst_out
  (destinations).

Two unmatched vertices are never adjacent, because that edge could be added
to M, which is already maximum. So every edge out of an Src_out vertex that
was unmatched lands in Dst_in, and every edge into an unmatched Dst_out
vertex starts in Src_in. The generator uses this to emit three groups:

| subgraph | `sg_id` | edges                          |
|----------|---------|--------------------------------|
| 0        | 0       | Src_in → (not Dst_in)          |
| 1        | 1       | (not Src_in) → Dst_in          |
| 2        | 2       | everything else                |

Subgraph 2 is mostly Src_in → Dst_in. The rules above can also classify a
matched pair with no unmatched neighbours as Src_out / Dst_out, so an
Src_out → Dst_out edge can exist. It also goes to subgraph 2, so every input
edge comes out exactly once.

### One epoch

`graph_restructurer` processes one semantic graph per epoch. The stages run
strictly one after another:

```
start ─► load (edge stream, build both CSRs) ─► decouple (matching)
      ─► search (classes into FIFOs) ─► generate (3 passes over edges) ─► done
```

* `start` latches `num_src` and `num_dst`.
* Edges then arrive on `e_valid/e_ready` with `e_last` on the final one.
* The class FIFOs are drained on `cls_valid/cls_ready/cls_id[4]`, in the
  order Src_in, Src_out, Dst_in, Dst_out.
* Regrouped edges leave on `sg_valid/sg_ready` with `sg_id`.

Counters report `match_count`, `rematch_count`, `sub_count[3]`,
`search_stalls` (cycles the searcher waited on a full class FIFO) and
`gen_stalls` (cycles the generator waited on `sg_ready`).

Cycle cost with no back-pressure, for S sources, D destinations, E edges and
K = max(S, D):

| stage     | cycles                                                            |
|-----------|-------------------------------------------------------------------|
| load      | K (clear) + E (receive) + K+1 (prefix) + E+1 (place) + a few      |
| decouple  | per source: 2 + Σ over sources expanded (1 + degree) + path length; then S+1 to write candidates |
| search    | Σ over matched pairs of (1 + out-degree of source) + (1 + in-degree of destination) + S + D |
| generate  | 3·(E+1)                                                           |

### Topology loader and adjacency buffers

An `adj_buffer` is a compressed-sparse-row store: `ptr[0..2^V_W]` row
pointers and `col[0..2^E_W-1]` neighbours. It is built without sorting, in
four steps:

1. Clear one degree counter per key (`clr_start`).
2. Count each edge once (`cnt_en`).
3. Turn the counts into row pointers with a running sum (`pfx_start`). The
   counters are then reused as fill pointers.
4. Place each edge once (`put_en`).

`topology_loader` drives both buffers at once: the source side is keyed by
source, the destination side by destination. It also keeps the raw edge
list that the generator replays. The edge list holds 2^E_W edges. Edges
beyond that are dropped and `overflow` is raised, so a too-large graph is
reported instead of being silently corrupted.

### Decoupler: maximum matching by augmenting paths

For every source n still unmatched, the decoupler runs one breadth-first
search for an augmenting path:

1. **Root** (`D_ROOT`): clear the visited bitmap in one cycle and push n on
   the search list (a `sync_fifo`).
2. **Pop** (`D_POP`): take a source u from the search list and look up its
   neighbour range in the source-side CSR.
3. **Scan** (`D_SCAN`): one neighbour v per cycle. If v is already visited,
   skip it. Otherwise mark it, record `pred[v] = u`, and then:
   * if v is free, an augmenting path ends here; go to step 4;
   * if v is matched to u', push u' on the search list.
   When the list runs empty, n stays unmatched.
4. **Augment** (`D_AUG`): one cycle per edge of the path. Set
   u = `pred[v]`, remember u's old partner, pair u with v, and continue from
   the old partner until n is reached. Every step after the first is a
   *re-match* and is counted in `rematch_count`.
5. **Emit** (`D_EMIT`): after the last source, write every matched pair
   into the candidate buffer in source order, one per cycle.

The source and destination matching bitmaps stay readable until the next
`start`; the recoupler reads them.

The per-vertex predecessor entry plays the role of the per-destination
waiting list of the original method. BFS from each free source with fresh
visited marks is the classical augmenting-path algorithm, so the result is a
maximum matching. The testbenches compare its size with an independent
depth-first reference on every graph.

### Recoupler

The `recoupler` contains the candidate buffer, the backbone searcher, one
FIFO per class (depth `FIFO_DEPTH`) and the generator. The generator starts
only after the searcher is done, because it needs the final Src_in and
Dst_in bitmaps.

`backbone_searcher` makes four passes:

* **S** – for each matched pair: read the out-neighbours of the source and
  look each up in the destination matching bitmap.
* **T** – for each matched pair: read the in-neighbours of the destination
  and look each up in the source matching bitmap.
* **R** – sweep all sources and all destinations and push the ones not
  classified yet as Src_out / Dst_out.

Details:

* Four class bitmaps make sure each vertex is pushed exactly once.
* A push is one-hot over the four FIFOs with a shared id.
* If the target FIFO is full, the searcher holds its state; `stall_cycles`
  counts these cycles.
* The Src_in and Dst_in bitmaps stay readable for the generator.

`graph_generator` reads the edge list three times, one edge per cycle. On
pass p it offers an edge only if the edge's class (from the two bitmaps)
equals p. An offered edge waits while `sg_ready` is low. Within a subgraph,
edges keep their original order.

---

## 3. Parameters and capacities

| parameter (where)                    | default | basis |
|--------------------------------------|---------|-------|
| `NUM_TYPES` (pkg)                    | 4       | every evaluated dataset (IMDB, ACM, DBLP) has 4 vertex types |
| `MAX_HOPS` / `MAX_LEN` (pkg)         | 9 / 10  | metapaths of up to nine hops are evaluated |
| `CTT_DEPTH` (pkg), `DEPTH`, `CTT_WORDS` | 1572 | 5 KB CTT budget / 26-bit node |
| `V_W`                                | 14      | own choice: 16384 ids per side; the largest vertex type evaluated (DBLP papers) has 14328 |
| `E_W`                                | 16      | own choice: 65536 edges per epoch; 65536 × 56 bits of edge list plus two CSRs ≈ 458 KB, close to the 480 KB recoupler budget |
| `FIFO_DEPTH` (recoupler)             | 4096    | own choice |
| search list depth (decoupler)        | 2^V_W   | own choice: a source is pushed at most once per search |

Storage at the defaults is about 6.4 Mbit of memory arrays plus about
117k flip-flops, most of them the one-cycle-clearable bitmaps. That is
roughly 800 KB in all. The published budget for CTT, Decoupler and Recoupler
is 653 KB; the difference comes mainly from the direct-mapped per-vertex
matching arrays, which take the place of the hash-allocated FIFOs.

What fits at the defaults:

* All vertex types of IMDB, ACM and DBLP fit (at most 14328 per side).
* Metapaths of 2–9 hops fit.
* The largest one-hop relations of IMDB (movie–keyword, about 24k edges in
  the public dataset) fit in one epoch.
* The paper–term relations of ACM (about 256k edges) and DBLP (about 86k)
  do not. The loader flags them with `overflow`, and the host would have to
  split them.

The CTT is keyed on vertex types only. Two different relations between the
same pair of types are therefore one trie entry; ACM's cites and cited-by
are an example.

---

## 4. What follows the method and what is this design's own

These parts follow the published method:

* the callback trie of metapaths, with level-1 nodes, callback edges and
  stored nodes;
* the Data / Next P. / Callback P. fields;
* the CP and Candidate Register and the comparator / AND / pointer-mux
  matcher;
* storing every new metapath;
* maximum matching for the backbone candidates, with a search list, visited
  bitmap, matching bitmaps and a candidate buffer;
* the backbone selection rules and the four class FIFOs;
* source-side and destination-side adjacency buffers;
* the three-subgraph regrouping.

These are this design's own choices:

* the child-block layout of the trie and the reuse of the deepest stored
  node;
* every handshake and element format;
* the CSR buffers and how they are built;
* BFS order in the matching;
* the edge rule of each subgraph, the catch-all third subgraph and the
  three-pass emission;
* the generator finds each edge's subgraph from the Src_in / Dst_in bitmaps
  and the stored edge list. The four class FIFOs are not read back; they go
  to the accelerator;
* every node carries a callback pointer, not only the leaves;
* all widths and depths except the CTT size.

These parts of the original architecture are **not** built:

* **The hash table and set-associative FIFOs of the decoupler, and the
  Matching Buffer they spill into.** They are storage that saves area. Here
  every vertex has a direct-mapped match and predecessor entry, which needs
  no replacement. Their organisation (sets, ways, hash) is not specified
  well enough to reproduce.
* **Overlap between stages.** Loading, decoupling, recoupling and the
  consumer run one after another inside an epoch, and epochs do not overlap.
  The original streams results between Decoupler, Recoupler and accelerator
  in a pipeline.
* **Everything outside the frontend.** That covers the host CPU, the memory
  controller and HBM, and the HGNN accelerator. Turning a generation list
  into the actual semantic-graph edges is the host's job.

---

## 5. Using and checking the RTL

Each testbench in `tb/` is self-checking. It prints
`TB_RESULT checks=N failures=M`, and a watchdog ends a hung run as a
failure. Simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/sihgnn_pkg.sv \
          tb/tb_sihgnn_top.sv --top-module tb_sihgnn_top -Mdir obj -o sim
./obj/sim
```

| testbench                   | what it checks |
|-----------------------------|----------------|
| `tb_ctt_buffer`             | random reads on both ports against a model |
| `tb_ctt_matcher`            | random node pairs against the selection rule |
| `tb_semantic_graph_builder` | the figure example (APS, PAP, APA, APSPA), reuse of inner stored nodes, refusals, exact latency of every request |
| `tb_sync_fifo`              | random push/pop/clear against a queue |
| `tb_adj_buffer`             | random graphs; every row against the model |
| `tb_topology_loader`        | both CSRs and the edge list; overflow |
| `tb_decoupler`              | matching is valid and maximum against a DFS reference; the candidate list |
| `tb_candidate_buffer`       | write, read and clear |
| `tb_backbone_searcher`      | class sets against the rules, no push into a full FIFO, stalls occur |
| `tb_graph_generator`        | subgraph order, ids and counts under random `sg_ready` |
| `tb_recoupler`              | the two above together with depth-4 FIFOs |
| `tb_graph_restructurer`     | 30 random epochs at reduced widths |
| `tb_sihgnn_top`             | see below |

`tb_sihgnn_top` runs the top at its default sizes. It:

* loads the ACM relations into the CTT and decomposes APS, PAP, APA and
  APSPA;
* checks that a metapath with a missing relation is refused;
* runs random restructuring epochs;
* runs a 5000-source epoch whose class FIFOs are held back until the
  searcher stalls;
* runs an epoch of 65539 edges that must overflow.

It counts trie reuse, refusals, re-matching, searcher stalls and generator
stalls, and fails if any of them never happened. The overflow epoch is
checked directly. The whole run takes a few seconds.
