// adj_list_buffer: one direction of a semantic graph's topology in
// compressed-sparse-row form (the Src Adj. or the Dst Adj. buffer).
//
// Row v's neighbours occupy neighbour words off[v] .. off[v+1]-1. The row
// offsets sit in their own table of NV+1 entries and the neighbour identifiers
// in a table of WORDS 16-bit words. Both tables are written through the load
// port while the frontend is idle (the topology arriving from off-chip
// memory). A reader puts a vertex on row_idx and gets its row bounds
// row_begin/row_end in the same cycle, then walks nbr_addr through that range
// and gets each neighbour on nbr_data in the same cycle. The CSR layout and
// the separate offset table are this design's choice; the source only states
// that the adjacency list buffers return a candidate's neighbours.
module adj_list_buffer
  import gdr_pkg::*;
#(
  parameter int unsigned NV    = NV_MAX,
  parameter int unsigned WORDS = ADJ_WORDS,
  localparam int unsigned VW   = $clog2(NV),
  localparam int unsigned EW   = $clog2(WORDS + 1)
) (
  input  logic          clk,
  // load port
  input  logic          off_we,
  input  logic [VW:0]   off_addr,     // 0 .. NV
  input  logic [EW-1:0] off_data,
  input  logic          nbr_we,
  input  logic [EW-1:0] nbr_waddr,
  input  vid_t          nbr_wdata,
  // read port
  input  logic [VW-1:0] row_idx,
  output logic [EW-1:0] row_begin,
  output logic [EW-1:0] row_end,
  input  logic [EW-1:0] nbr_addr,
  output vid_t          nbr_data
);

  logic [EW-1:0] off [NV+1];
  vid_t          nbr [WORDS];

  always_ff @(posedge clk) begin
    if (off_we && off_addr <= (VW+1)'(NV)) off[off_addr] <= off_data;
    if (nbr_we && nbr_waddr < EW'(WORDS))  nbr[nbr_waddr] <= nbr_wdata;
  end

  assign row_begin = off[{1'b0, row_idx}];
  assign row_end   = off[{1'b0, row_idx} + 1'b1];
  assign nbr_data  = (nbr_addr < EW'(WORDS)) ? nbr[nbr_addr] : '0;

endmodule
