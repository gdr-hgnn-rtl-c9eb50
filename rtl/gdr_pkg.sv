// gdr_pkg: sizes, types and encodings shared by the graph-restructuring
// frontend.
//
// Vertex identifiers are 16-bit words. A semantic graph is bipartite: its
// source vertices and its destination vertices are numbered separately, each
// from 0, so a vertex is named by an identifier plus a side flag. The default
// sizes come from the buffer capacities of the frontend's reference
// configuration (8 KB of matching FIFOs, 160 KB Matching Buffer, 160 KB
// Candidate Buffer, 320 KB adjacency list buffer); how those bytes are cut
// into words and regions is this design's own choice and is described next to
// each constant.
package gdr_pkg;

  // Width of a vertex identifier and of every buffer word (16 bit = 2 bytes).
  localparam int unsigned VID_W = 16;
  typedef logic [VID_W-1:0] vid_t;

  // Largest number of vertices on one side of a semantic graph. 16384 covers
  // the largest vertex type of the evaluated datasets (14328 papers in DBLP).
  localparam int unsigned NV_MAX = 16384;

  // 160 KB Matching Buffer and 160 KB Candidate Buffer in 16-bit words.
  localparam int unsigned MB_WORDS   = 81920;
  localparam int unsigned CAND_WORDS = 81920;

  // 320 KB adjacency list buffer: half holds the out-neighbour lists of the
  // sources (Src Adj.), half the in-neighbour lists of the destinations
  // (Dst Adj.), 81920 16-bit neighbour words each.
  localparam int unsigned ADJ_WORDS = 81920;

  // 8 KB of matching FIFO slots: 2048 slots of 32 bit (tag + parent),
  // arranged as 256 sets of 8 ways.
  localparam int unsigned MF_SETS = 256;
  localparam int unsigned MF_WAYS = 8;

  // Depth of each of the four output vertex FIFOs (Src_in, Src_out, Dst_in,
  // Dst_out).
  localparam int unsigned VFIFO_DEPTH = 64;

  // A backbone candidate as held in the Candidate Buffer: the side flag in
  // the top bit, the vertex identifier below it.
  typedef struct packed {
    logic              is_dst;
    logic [VID_W-2:0]  id;
  } cand_t;

  // The subgraph an emitted edge belongs to.
  //   SG_OUT_IN : Src_out -> Dst_in
  //   SG_IN_IN  : Src_in  -> Dst_in
  //   SG_IN_OUT : Src_in  -> Dst_out
  //   SG_UNCOVERED : Src_out -> Dst_out (an edge the selected backbone does
  //   not cover; see the graph generator)
  typedef enum logic [1:0] {
    SG_OUT_IN    = 2'd0,
    SG_IN_IN     = 2'd1,
    SG_IN_OUT    = 2'd2,
    SG_UNCOVERED = 2'd3
  } subgraph_e;

  // The four vertex classes, one output FIFO each.
  typedef enum logic [1:0] {
    VC_SRC_IN  = 2'd0,
    VC_SRC_OUT = 2'd1,
    VC_DST_IN  = 2'd2,
    VC_DST_OUT = 2'd3
  } vclass_e;

  // Topology load port: which array of which adjacency buffer is written.
  typedef enum logic [1:0] {
    LD_SRC_OFF = 2'd0,   // row offsets of Src Adj.
    LD_SRC_NBR = 2'd1,   // neighbour words of Src Adj.
    LD_DST_OFF = 2'd2,   // row offsets of Dst Adj.
    LD_DST_NBR = 2'd3    // neighbour words of Dst Adj.
  } ld_sel_e;

endpackage
