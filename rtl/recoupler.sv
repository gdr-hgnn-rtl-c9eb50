// recoupler: graph recoupling, from backbone candidates to three subgraphs.
//
// The Decoupler's candidates are written, in arrival order, into the
// Candidate Buffer (cand_clr empties it before a new graph). On start the
// Backbone Searcher sorts every vertex into Src_in, Src_out, Dst_in or
// Dst_out and pushes it into that class's output FIFO; when it is done the
// Graph Generator walks the edges and streams them out grouped by subgraph.
// The four vertex FIFOs are drained by the accelerator on vq_valid/vq_ready
// (a vertex is taken in a cycle with both high); a full FIFO stalls the
// searcher. The Src Adj. read port is used by the searcher first and by the
// generator after it; the Dst Adj. port only by the searcher.
//
// Timing: done pulses one cycle after the generator's last pass. The
// searcher and the generator run one after the other; see their own headers
// for per-cycle costs.
//
// Following the source: Candidate Buffer -> Backbone Searcher -> Src_in,
// Src_out, Dst_in, Dst_out FIFOs -> Graph Generator. The FIFO depth and
// handshakes are this design's choice.
module recoupler
  import gdr_pkg::*;
#(
  parameter int unsigned NV       = NV_MAX,
  parameter int unsigned CAND_W   = CAND_WORDS,
  parameter int unsigned ADJ_W    = ADJ_WORDS,
  parameter int unsigned VQ_DEPTH = VFIFO_DEPTH,
  localparam int unsigned VW      = $clog2(NV),
  localparam int unsigned EW      = $clog2(ADJ_W + 1),
  localparam int unsigned CW      = $clog2(CAND_W + 1),
  localparam int unsigned CAW     = $clog2(CAND_W)
) (
  input  logic          clk,
  input  logic          rst_n,
  // candidates from the Decoupler
  input  logic          cand_clr,
  input  logic          cand_valid,
  input  cand_t         cand,
  output logic [CW-1:0] n_cand,
  // control
  input  logic          start,
  input  logic [VW:0]   nsrc,
  input  logic [VW:0]   ndst,
  output logic          busy,
  output logic          done,
  // Matching Bm.
  input  logic [NV-1:0] matched_src,
  input  logic [NV-1:0] matched_dst,
  // Src Adj. and Dst Adj. read ports
  output logic [VW-1:0] src_row_idx,
  input  logic [EW-1:0] src_row_begin,
  input  logic [EW-1:0] src_row_end,
  output logic [EW-1:0] src_nbr_addr,
  input  vid_t          src_nbr_data,
  output logic [VW-1:0] dst_row_idx,
  input  logic [EW-1:0] dst_row_begin,
  input  logic [EW-1:0] dst_row_end,
  output logic [EW-1:0] dst_nbr_addr,
  input  vid_t          dst_nbr_data,
  // vertex FIFOs towards the accelerator, indexed by vclass_e
  output logic [3:0]    vq_valid,
  output vid_t          vq_data [4],
  input  logic [3:0]    vq_ready,
  // edge stream towards the accelerator
  output logic          e_valid,
  input  logic          e_ready,
  output vid_t          e_src,
  output vid_t          e_dst,
  output subgraph_e     e_sg,
  // statistics
  output logic [31:0]   stall_cycles,
  output logic [31:0]   sg_count [4]
);

  // ---- Candidate Buffer ----------------------------------------------------
  logic [CW-1:0] bs_cand_addr;
  vid_t          cb_rdata, unused_cb_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                            n_cand <= '0;
    else if (cand_clr)                     n_cand <= '0;
    else if (cand_valid && n_cand < CW'(CAND_W)) n_cand <= n_cand + 1'b1;
  end

  buffer_ram #(.WORDS(CAND_W), .WIDTH(VID_W)) u_candidate_buffer (
    .clk, .we(cand_valid && !cand_clr && n_cand < CW'(CAND_W)),
    .waddr(n_cand[CAW-1:0]), .wdata(cand),
    .raddr_a(bs_cand_addr[CAW-1:0]), .rdata_a(cb_rdata),
    .raddr_b('0), .rdata_b(unused_cb_b)
  );

  // ---- Backbone Searcher ----------------------------------------------------
  logic          bs_busy, bs_done;
  logic [VW-1:0] bs_src_row_idx;
  logic [EW-1:0] bs_src_nbr_addr;
  logic [3:0]    vq_push, vq_full, vq_empty;
  vid_t          vq_din [4];
  logic [NV-1:0] src_in, dst_in;

  backbone_searcher #(.NV(NV), .CAND_W(CAND_W), .ADJ_W(ADJ_W)) u_backbone_searcher (
    .clk, .rst_n, .start, .nsrc, .ndst, .ncand(n_cand),
    .busy(bs_busy), .done(bs_done),
    .cand_addr(bs_cand_addr), .cand_data(cand_t'(cb_rdata)),
    .src_row_idx(bs_src_row_idx), .src_row_begin, .src_row_end,
    .src_nbr_addr(bs_src_nbr_addr), .src_nbr_data,
    .dst_row_idx, .dst_row_begin, .dst_row_end, .dst_nbr_addr, .dst_nbr_data,
    .matched_src, .matched_dst,
    .vq_push, .vq_din, .vq_full,
    .src_in, .dst_in, .stall_cycles
  );

  // ---- the four vertex FIFOs ------------------------------------------------
  for (genvar q = 0; q < 4; q++) begin : g_vq
    logic [$clog2(VQ_DEPTH+1)-1:0] unused_count;
    sync_fifo #(.WIDTH(VID_W), .DEPTH(VQ_DEPTH)) u_vq (
      .clk, .rst_n, .clr(1'b0),
      .push(vq_push[q]), .din(vq_din[q]),
      .pop(vq_ready[q] && !vq_empty[q]), .dout(vq_data[q]),
      .empty(vq_empty[q]), .full(vq_full[q]), .count(unused_count)
    );
  end
  assign vq_valid = ~vq_empty;

  // ---- Graph Generator ----------------------------------------------------------
  logic          gg_busy, gg_done;
  logic [VW-1:0] gg_row_idx;
  logic [EW-1:0] gg_nbr_addr;

  graph_generator #(.NV(NV), .ADJ_W(ADJ_W)) u_graph_generator (
    .clk, .rst_n, .start(bs_done), .nsrc, .busy(gg_busy), .done(gg_done),
    .src_in, .dst_in,
    .row_idx(gg_row_idx), .row_begin(src_row_begin), .row_end(src_row_end),
    .nbr_addr(gg_nbr_addr), .nbr_data(src_nbr_data),
    .e_valid, .e_ready, .e_src, .e_dst, .e_sg, .sg_count
  );

  // the searcher owns the Src Adj. port until it is done
  assign src_row_idx  = gg_busy ? gg_row_idx  : bs_src_row_idx;
  assign src_nbr_addr = gg_busy ? gg_nbr_addr : bs_src_nbr_addr;

  assign busy = bs_busy || gg_busy;
  assign done = gg_done;

endmodule
