// tb_gdr_hgnn: end-to-end test of the frontend at reduced sizes (64 vertices
// a side, a 4-set x 2-way matching FIFO table, 4-deep vertex FIFOs) so that
// replacement and stalls happen on small graphs. Two hand-made graphs and
// twelve random ones; see tb_gdr_hgnn_body.svh for the checks.
module tb_gdr_hgnn;
  import gdr_pkg::*;
  import tb_graph_pkg::*;
  localparam int NV = 64, MB_W = 192, CAND_W = 128, ADJ_W = 4096;
  localparam int VW = $clog2(NV), EW = $clog2(ADJ_W + 1), CW = $clog2(CAND_W + 1);
  localparam int N_RANDOM = 12, MAX_SIDE = NV;
  localparam int BIG_SIDE = 0, VQ_READY_PCT = 60, WATCHDOG = 1000000;

  `include "tb_gdr_hgnn_body.svh"

  gdr_hgnn #(.NV(NV), .MB_W(MB_W), .CAND_W(CAND_W), .ADJ_W(ADJ_W),
             .SETS(4), .WAYS(2), .VQ_DEPTH(4)) dut (.*);
endmodule
