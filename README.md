# GDR-HGNN frontend: restructuring semantic graphs by decoupling and recoupling

A heterogeneous graph neural network (HGNN) splits its input graph into
*semantic graphs*: one bipartite graph per relation, with edges from source
vertices (e.g. authors) to destination vertices (e.g. papers). An HGNN
accelerator aggregates each destination's neighbours, and on real semantic
graphs that access pattern has almost no locality: the neighbours of one
destination are scattered over the whole source side, so on-chip buffers miss
most of the time.

The frontend described here sits between memory and such an accelerator and
rewrites each semantic graph's topology into three subgraphs that each have a
tight community structure. It does so in two steps:

1. **Decoupling.** A maximum matching of the bipartite graph is found. Every
   matched vertex is a *backbone candidate*.
2. **Recoupling.** From the candidates a *graph backbone* is chosen, a set of
   vertices that touches (ideally) every edge. Every vertex then falls into
   one of four classes, and the edges are regrouped by the classes of their
   two ends:

| class     | meaning                                              |
|-----------|------------------------------------------------------|
| `Src_in`  | source in the backbone                               |
| `Src_out` | source outside the backbone                          |
| `Dst_in`  | destination in the backbone                          |
| `Dst_out` | destination outside the backbone                     |

| subgraph tag     | edges                      |
|------------------|----------------------------|
| `SG_OUT_IN` (0)  | `Src_out -> Dst_in`        |
| `SG_IN_IN` (1)   | `Src_in  -> Dst_in`        |
| `SG_IN_OUT` (2)  | `Src_in  -> Dst_out`       |
| `SG_UNCOVERED` (3) | `Src_out -> Dst_out` (see below) |

Each subgraph is anchored on a small backbone side, which is what gives the
accelerator reuse: in `SG_OUT_IN` every edge lands on a backbone destination,
in `SG_IN_OUT` every edge leaves a backbone source.

The RTL is written in SystemVerilog (IEEE 1800-2017) and is synthesizable;
the memories are plain arrays.

## Block structure

```
                 load port (topology from memory)
                        |
          +-------------+--------------+
          v                            v
   Src Adj. buffer               Dst Adj. buffer        adj_list_buffer x2
   (out-neighbours)              (in-neighbours)
          |                            |
  +-------+---------------+            |
  |  DECOUPLER            |            |
  |  Search_List FIFO     |            |
  |  Visited Bm.          |            |
  |  hash table + matching FIFOs ----> Matching Buffer (spill)
  |  Matching Bm.         |            |
  +-------+---------------+            |
          | candidates                 |
  +-------v----------------------------v--+
  |  RECOUPLER                            |
  |  Candidate Buffer                     |
  |  Backbone Searcher -> Src_in / Src_out / Dst_in / Dst_out FIFOs --> vertex streams
  |  Graph Generator   -> tagged edge stream -----------------------> edge stream
  +---------------------------------------+
```

| file                     | block                                                      |
|--------------------------|------------------------------------------------------------|
| `rtl/gdr_pkg.sv`         | shared sizes, vertex id type, class and subgraph encodings |
| `rtl/gdr_hgnn.sv`        | top: load port, sequencing of the two stages, statistics   |
| `rtl/decoupler.sv`       | maximum matching                                           |
| `rtl/match_fifo_table.sv`| hash table of set-associative matching FIFOs               |
| `rtl/recoupler.sv`       | Candidate Buffer, Backbone Searcher, vertex FIFOs, Graph Generator |
| `rtl/backbone_searcher.sv` | backbone selection and vertex classification             |
| `rtl/graph_generator.sv` | edge regrouping into subgraphs                             |
| `rtl/adj_list_buffer.sv` | one CSR direction of the topology                          |
| `rtl/buffer_ram.sv`      | Matching Buffer and Candidate Buffer                       |
| `rtl/bitmap.sv`          | Visited, Matching and class bitmaps                        |
| `rtl/sync_fifo.sv`       | Search_List and the four vertex FIFOs                      |

## Decoupling: maximum matching in hardware

The matching is built one augmenting path at a time (the classic Hungarian /
Kuhn method for bipartite graphs). For each source vertex `n` that is still
unmatched:

1. `n` enters the **Search_List** and the **Visited Bm.** is cleared.
2. A source `u` is popped. Its out-neighbours are read from the Src Adj.
   buffer, one per cycle. A neighbour `v` already visited is skipped.
   Otherwise `v` is marked visited and `u` is recorded as the vertex that
   reached `v`: it is pushed into `Matching_FIFO[v]`.
3. If `v` is unmatched, an augmenting path has been found. The controller
   walks it backwards: `v` is matched to `u`; `u`'s old partner `v'` is
   taken, and the vertex that reached `v'` is popped from
   `Matching_FIFO[v']` and becomes the next `u`. This repeats until the
   search's start vertex `n` is reached. Each step costs two cycles (read
   the old partner, then look up and pop the FIFO while writing the new pair).
4. If `v` is matched, its partner is pushed into the Search_List, so the
   search continues breadth-first.
5. When the Search_List runs empty, no augmenting path exists from `n`; the
   search is counted as failed and `n` stays unmatched.

This finds a maximum matching (Berge's theorem: a matching is maximum when
no augmenting path is left), and the testbenches compare its size with an
independent depth-first reference on every graph.

### Matching FIFOs, hash table and spill

There is one logical FIFO per destination, but only a small physical table
of them: 256 sets x 8 ways of 32-bit entries (16-bit key, 16-bit value),
8 KB. A destination id is hashed (XOR-fold of its id to 8 bits) to a set;
insertion takes a free way, otherwise the round-robin victim of that set.
A victim is not lost: it is **spilled** to the Matching Buffer in the same
cycle, in a region indexed by destination. When the flip walk later needs
`Matching_FIFO[v']`, it looks in the table first and falls back to the
Matching Buffer on a miss. Because a destination is visited at most once per
search, one entry per logical FIFO is enough; the table is cleared at the
start of each search.

### Matching Buffer and Matching Bm.

The Matching Buffer (81920 16-bit words) holds three regions of `NV` words:

| base   | contents                                           |
|--------|----------------------------------------------------|
| 0      | partner of source `u`                              |
| NV     | partner of destination `v`                         |
| 2 * NV | spilled matching-FIFO entry of destination `v`     |

A region word is only meaningful where the corresponding **Matching Bm.**
bit is set, so the buffer itself is never cleared. The Matching Bm. (one bit
per source, one per destination) is also what the Recoupler reads.

### Candidates

When all sources have been tried, the decoupler streams the candidates:
first every matched source, then every matched destination, as
`{is_dst, id[14:0]}` words. The Recoupler stores them in the Candidate Buffer
in arrival order.

## Recoupling: backbone selection and its one-hop rule

The **Backbone Searcher** reads the candidates in order. For a source
candidate it reads out-neighbours from the Src Adj. buffer; for a destination
candidate, in-neighbours from the Dst Adj. buffer. Each neighbour is tested in
the Matching Bm.:

* If the candidate has at least one **unmatched** neighbour, the candidate
  joins the backbone (`Src_in` or `Dst_in`) and every unmatched neighbour is
  pushed to the opposite `_out` FIFO (once: a bitmap remembers which vertices
  were already pushed).
* If all neighbours are matched, the candidate is skipped for now.

Afterwards every source and destination not yet classified is pushed to
`Src_out` or `Dst_out`. Each vertex therefore leaves the frontend exactly once,
through one of the four FIFOs. When the FIFO a push needs is full, the
searcher stalls; stalled cycles are counted.

**The uncovered group.** The one-hop rule does not always produce a vertex
cover. A matched vertex whose neighbours are all matched is left out of the
backbone, and so an edge between two such vertices has both ends outside it.
The simplest case is a complete 3x3 graph: it has a perfect matching, no
candidate has an unmatched neighbour, nothing enters the backbone, and all
nine edges are `Src_out -> Dst_out`. This design keeps the rule as stated
and emits such edges in a fourth group tagged `SG_UNCOVERED`, so that no
edge is lost. A consumer that only accepts three subgraphs must treat this
group separately (for example, as ordinary unrestructured edges).

### Graph Generator

When classification is done, the **Graph Generator** walks the Src Adj.
buffer once per subgraph (four passes, in tag order) and emits each edge
`(s, d)` in the pass its two classes select. A pass skips a whole row when
the source's class cannot contribute to it. Output is one edge per beat on a
valid/ready stream (`e_valid`, `e_ready`, `e_src`, `e_dst`, `e_sg`); the
edge is held stable while `e_ready` is low. Per-subgraph edge counts are
available in `sg_count`.

## Top level: `gdr_hgnn`

### Loading a graph

The topology is loaded in CSR form through one write port while the frontend
is idle (an assertion checks that no load happens while busy):

| `ld_sel`      | writes                                   | `ld_addr` range |
|---------------|------------------------------------------|-----------------|
| `LD_SRC_OFF`  | row offset of source `ld_addr`           | 0 .. nsrc       |
| `LD_SRC_NBR`  | neighbour word (destination id)          | 0 .. edges-1    |
| `LD_DST_OFF`  | row offset of destination `ld_addr`      | 0 .. ndst       |
| `LD_DST_NBR`  | neighbour word (source id)               | 0 .. edges-1    |

Row `v`'s neighbours are words `off[v] .. off[v+1]-1`. Both directions must
describe the same edge set, and a graph must not hold the same edge twice.

### Running

A one-cycle `start` with `nsrc` and `ndst` begins the epoch. The decoupler
runs first, then the recoupler; `busy` is high throughout and `done` pulses
at the end. Vertex classes come out on four valid/ready streams
(`vq_valid[q]`, `vq_data[q]`, `vq_ready[q]`, with `q` in the order
`Src_in`, `Src_out`, `Dst_in`, `Dst_out`) while the Backbone Searcher runs;
edges come out on the edge stream after it. The consumer may apply back
pressure on both.

Statistics: matched pairs, candidates, spills, flip steps, failed searches,
stall cycles, edges per subgraph, and cycles spent in each stage. `dbg_dst`
/ `dbg_partner` read the partner of a destination while idle.

### Timing

Every controller step takes one clock: one neighbour per cycle in a search,
two cycles per flip step, one candidate or neighbour per cycle in the
Backbone Searcher (plus stalls), one edge per cycle in the Graph Generator
(plus back pressure and skipped rows). All memories are read combinationally,
so every lookup completes in the cycle it is issued. On a sparse 3000 x 3000
graph with three out-edges per source the decoupler took about 2.0 M cycles
and the recoupler about 94 k cycles; matching dominates, because late searches
in a nearly full matching explore a large part of the graph.

## Sizes

| parameter | default | derived from |
|-----------|---------|--------------|
| `NV` (vertices per side) | 16384 | large enough for the biggest vertex type of the usual benchmark datasets (14328 papers in DBLP) |
| `MB_W` Matching Buffer words | 81920 | 160 KB of 16-bit words |
| `CAND_W` Candidate Buffer words | 81920 | 160 KB of 16-bit words |
| `ADJ_W` neighbour words per direction | 81920 | 320 KB split over two directions |
| `SETS` x `WAYS` matching FIFOs | 256 x 8 | 8 KB of 32-bit entries |
| `VQ_DEPTH` vertex FIFO depth | 64 | own choice |

At these sizes a semantic graph fits when each side has at most 16384
vertices and it has at most 81920 edges. Of the common benchmark graphs,
all IMDB relations and most ACM and DBLP relations fit; the paper-term
relations of ACM (about 256 k edges) and DBLP (about 86 k edges) do not, and
have to be split into parts of at most 81920 edges before loading.

## Where this design departs from the original description, and why

* **No overlap between graphs.** The original design streams: while one
  semantic graph is recoupled, the next is already being decoupled, and
  restructured data flows to the accelerator continuously. Here one graph
  is restructured at a time; overlap would need a second set of adjacency
  buffers and bitmaps, whose organisation is not specified.
* **Breadth-first augmenting paths with a per-search Visited Bm.** The
  published pseudo-code is not consistent enough to implement literally; the
  intent (maximum matching via FIFOs and iterative flips) is implemented.
* **Matched pairs live in the Matching Buffer**, and the matching FIFOs hold
  only the "who reached this destination" entry; one entry per FIFO suffices.
* **The Graph Generator reads classes from bitmaps, not from the four FIFOs.**
  The four vertex FIFOs drain to the accelerator as class lists; the
  generator takes each vertex's class from the class bitmaps the Backbone
  Searcher fills and the edges from the Src Adj. buffer, so the FIFOs can be
  small and never need to be read twice.
* **Fourth edge group** for edges the one-hop backbone rule leaves uncovered
  (see above).
* **Own choices where nothing is specified:** 16-bit words, CSR load format
  and its separate offset tables, XOR-fold hash, round-robin replacement,
  combinational-read memories (a real SRAM would add one cycle per lookup),
  the vertex-FIFO depth, deduplication and stall behaviour of the Backbone
  Searcher, the candidate order, valid/ready handshakes, active-low
  asynchronous reset of control state (memories are not reset).
* **Not included:** the memory controller and HBM that supply the topology,
  and the HGNN accelerator that consumes the result. The load port and the
  two output streams are where they connect.

## Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>` at the end and has a cycle watchdog.
`tb/tb_graph_pkg.sv` provides random bipartite graphs and independent
reference models (depth-first maximum matching, the backbone rule).

| testbench | what it checks |
|-----------|----------------|
| `tb_bitmap`, `tb_sync_fifo`, `tb_buffer_ram`, `tb_adj_list_buffer` | against behavioural models, random traffic |
| `tb_match_fifo_table` | spills predicted by a per-set model; every key found or spilled, never both |
| `tb_decoupler` | matching valid and maximum on 24 graphs; spills, multi-step flips and failed searches must occur |
| `tb_backbone_searcher` | each vertex pushed once, into its class; random full flags cause stalls |
| `tb_graph_generator` | each edge once, correct tag, pass order, counters, hold under back pressure |
| `tb_recoupler` | classes and edges end to end with small FIFOs |
| `tb_gdr_hgnn` | whole frontend, reduced table and FIFO sizes, 14 graphs |
| `tb_gdr_hgnn_full` | whole frontend at default sizes, including a 3000 x 3000 graph |

The two top-level tests check the matching against the reference, every
vertex's class, every edge's tag and all statistics, and they fail unless each
mechanism occurred at least once: a spill from the matching-FIFO table, a
flip walk of more than one step, a failed search, a stall on a full vertex
FIFO, a held edge under back pressure, and edges in all four groups.

To run one with plain verilator (5.x), list the package and the graph
library first:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/gdr_pkg.sv tb/tb_graph_pkg.sv \
  rtl/bitmap.sv rtl/sync_fifo.sv rtl/buffer_ram.sv rtl/adj_list_buffer.sv \
  rtl/match_fifo_table.sv rtl/decoupler.sv rtl/backbone_searcher.sv \
  rtl/graph_generator.sv rtl/recoupler.sv rtl/gdr_hgnn.sv \
  tb/tb_gdr_hgnn.sv --top-module tb_gdr_hgnn
./obj_dir/Vtb_gdr_hgnn
```

`-Itb` is needed for `tb_gdr_hgnn_body.svh`, which both top-level tests
include. The full-size test takes a few seconds of simulation after a longer
compile. For a block test, list only the files that block needs.
