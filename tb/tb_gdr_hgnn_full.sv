// tb_gdr_hgnn_full: the frontend at its default sizes (16384 vertices a
// side, 160 KB Matching and Candidate Buffers, 320 KB of adjacency lists,
// 256 x 8 matching FIFOs, 64-deep vertex FIFOs) restructuring the two
// hand-made graphs, four random graphs of up to 200 vertices a side, and one
// sparse 3000 x 3000 graph with three out-edges per source, large enough for
// the default matching FIFO table to replace entries. The accelerator takes a
// vertex in only 20% of cycles so that the 64-deep vertex FIFOs fill. See
// tb_gdr_hgnn_body.svh for the checks.
module tb_gdr_hgnn_full;
  import gdr_pkg::*;
  import tb_graph_pkg::*;
  localparam int NV = NV_MAX;
  localparam int VW = $clog2(NV), EW = $clog2(ADJ_WORDS + 1), CW = $clog2(CAND_WORDS + 1);
  localparam int N_RANDOM = 4, MAX_SIDE = 200;
  localparam int BIG_SIDE = 3000, VQ_READY_PCT = 20, WATCHDOG = 20000000;

  `include "tb_gdr_hgnn_body.svh"

  gdr_hgnn dut (.*);
endmodule
