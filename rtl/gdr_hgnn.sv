// gdr_hgnn: the graph-restructuring frontend placed in front of an HGNN
// accelerator.
//
// A semantic graph (bipartite: sources and destinations) is loaded into the
// two adjacency list buffers, Src Adj. (out-neighbours of each source) and
// Dst Adj. (in-neighbours of each destination), through the load port. On
// start the Decoupler finds a maximum matching and hands the matched vertices
// (the backbone candidates) to the Recoupler, which picks the graph backbone,
// streams every vertex out through one of four class FIFOs (Src_in, Src_out,
// Dst_in, Dst_out) and then streams every edge out grouped into the three
// subgraphs Src_out->Dst_in, Src_in->Dst_in and Src_in->Dst_out, followed by
// any Src_out->Dst_out edges the one-hop backbone rule left uncovered. Grouping
// edges this way lets the accelerator aggregate the neighbours shared by a
// small group of backbone vertices in one time frame, which is what reduces
// on-chip buffer replacement.
//
// Interface: the load port writes a row offset (ld_sel LD_SRC_OFF/LD_DST_OFF,
// ld_addr = row 0..NV) or a neighbour word (LD_SRC_NBR/LD_DST_NBR, ld_addr =
// word index) per cycle and is ignored while busy; it is where the shared
// memory controller connects. start (with nsrc/ndst) begins one restructuring
// epoch; busy is high until done pulses. Vertex and edge outputs use
// valid/ready handshakes. The Decoupler and the Recoupler run one after the
// other on the same loaded graph.
//
// Following the source: the Decoupler/Recoupler split, the buffers and
// FIFOs they contain, and what flows between them. This design's choices: the
// CSR load format, the handshakes, and that a new graph is loaded only after
// the previous epoch has finished. The original design also overlaps the
// decoupling of the next graph with the recoupling of the current one; that
// would need a second set of adjacency buffers and bitmaps and is not built.
//
// Lint reports rst_n as used both synchronously and asynchronously: the
// synchronous use is only the disable condition of the assertions.
module gdr_hgnn
  import gdr_pkg::*;
#(
  parameter int unsigned NV       = NV_MAX,
  parameter int unsigned MB_W     = MB_WORDS,
  parameter int unsigned CAND_W   = CAND_WORDS,
  parameter int unsigned ADJ_W    = ADJ_WORDS,
  parameter int unsigned SETS     = MF_SETS,
  parameter int unsigned WAYS     = MF_WAYS,
  parameter int unsigned VQ_DEPTH = VFIFO_DEPTH,
  localparam int unsigned VW      = $clog2(NV),
  localparam int unsigned EW      = $clog2(ADJ_W + 1),
  localparam int unsigned CW      = $clog2(CAND_W + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // topology load port
  input  logic          ld_we,
  input  ld_sel_e       ld_sel,
  input  logic [EW-1:0] ld_addr,
  input  logic [EW-1:0] ld_data,
  // control
  input  logic          start,
  input  logic [VW:0]   nsrc,
  input  logic [VW:0]   ndst,
  output logic          busy,
  output logic          done,
  // vertex classes, indexed by vclass_e
  output logic [3:0]    vq_valid,
  output vid_t          vq_data [4],
  input  logic [3:0]    vq_ready,
  // restructured edges
  output logic          e_valid,
  input  logic          e_ready,
  output vid_t          e_src,
  output vid_t          e_dst,
  output subgraph_e     e_sg,
  // statistics of the last epoch
  output logic [VW:0]   n_matched,
  output logic [CW-1:0] n_cand,
  output logic [31:0]   n_spills,
  output logic [31:0]   n_flips,
  output logic [31:0]   n_failed,
  output logic [31:0]   stall_cycles,
  output logic [31:0]   sg_count [4],
  output logic [31:0]   dec_cycles,
  output logic [31:0]   rec_cycles,
  // matched partner of a destination, read while idle
  input  logic [VW-1:0] dbg_dst,
  output vid_t          dbg_partner
);

  typedef enum logic [1:0] {P_IDLE, P_DEC, P_REC} phase_e;
  phase_e phase;

  // ---- adjacency list buffers ----------------------------------------------
  logic          ld_ok;
  logic [VW-1:0] s_row_idx, d_row_idx;
  logic [EW-1:0] s_row_begin, s_row_end, s_nbr_addr;
  logic [EW-1:0] d_row_begin, d_row_end, d_nbr_addr;
  vid_t          s_nbr_data, d_nbr_data;

  assign ld_ok = ld_we && (phase == P_IDLE);

  adj_list_buffer #(.NV(NV), .WORDS(ADJ_W)) u_src_adj (
    .clk,
    .off_we(ld_ok && ld_sel == LD_SRC_OFF), .off_addr(ld_addr[VW:0]), .off_data(ld_data),
    .nbr_we(ld_ok && ld_sel == LD_SRC_NBR), .nbr_waddr(ld_addr), .nbr_wdata(VID_W'(ld_data)),
    .row_idx(s_row_idx), .row_begin(s_row_begin), .row_end(s_row_end),
    .nbr_addr(s_nbr_addr), .nbr_data(s_nbr_data)
  );

  adj_list_buffer #(.NV(NV), .WORDS(ADJ_W)) u_dst_adj (
    .clk,
    .off_we(ld_ok && ld_sel == LD_DST_OFF), .off_addr(ld_addr[VW:0]), .off_data(ld_data),
    .nbr_we(ld_ok && ld_sel == LD_DST_NBR), .nbr_waddr(ld_addr), .nbr_wdata(VID_W'(ld_data)),
    .row_idx(d_row_idx), .row_begin(d_row_begin), .row_end(d_row_end),
    .nbr_addr(d_nbr_addr), .nbr_data(d_nbr_data)
  );

  // ---- Decoupler --------------------------------------------------------------
  logic          dec_start, dec_busy, dec_done;
  logic [VW-1:0] dec_row_idx;
  logic [EW-1:0] dec_nbr_addr;
  logic          cand_valid;
  cand_t         cand;
  logic [NV-1:0] matched_src, matched_dst;

  assign dec_start = start && (phase == P_IDLE);

  decoupler #(.NV(NV), .MB_W(MB_W), .ADJ_W(ADJ_W), .SETS(SETS), .WAYS(WAYS)) u_decoupler (
    .clk, .rst_n, .start(dec_start), .nsrc, .ndst, .busy(dec_busy), .done(dec_done),
    .row_idx(dec_row_idx), .row_begin(s_row_begin), .row_end(s_row_end),
    .nbr_addr(dec_nbr_addr), .nbr_data(s_nbr_data),
    .cand_valid, .cand, .matched_src, .matched_dst,
    .n_matched, .n_spills, .n_flips, .n_failed,
    .dbg_dst, .dbg_partner
  );

  // ---- Recoupler ------------------------------------------------------------------
  logic          rec_busy, rec_done;
  logic [VW-1:0] rec_row_idx;
  logic [EW-1:0] rec_nbr_addr;

  recoupler #(.NV(NV), .CAND_W(CAND_W), .ADJ_W(ADJ_W), .VQ_DEPTH(VQ_DEPTH)) u_recoupler (
    .clk, .rst_n,
    .cand_clr(dec_start), .cand_valid, .cand, .n_cand,
    .start(dec_done), .nsrc, .ndst, .busy(rec_busy), .done(rec_done),
    .matched_src, .matched_dst,
    .src_row_idx(rec_row_idx), .src_row_begin(s_row_begin), .src_row_end(s_row_end),
    .src_nbr_addr(rec_nbr_addr), .src_nbr_data(s_nbr_data),
    .dst_row_idx(d_row_idx), .dst_row_begin(d_row_begin), .dst_row_end(d_row_end),
    .dst_nbr_addr(d_nbr_addr), .dst_nbr_data(d_nbr_data),
    .vq_valid, .vq_data, .vq_ready,
    .e_valid, .e_ready, .e_src, .e_dst, .e_sg,
    .stall_cycles, .sg_count
  );

  // the Src Adj. port belongs to whichever half is working
  assign s_row_idx  = (phase == P_REC) ? rec_row_idx  : dec_row_idx;
  assign s_nbr_addr = (phase == P_REC) ? rec_nbr_addr : dec_nbr_addr;

  // ---- epoch sequencing --------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase      <= P_IDLE;
      done       <= 1'b0;
      dec_cycles <= '0;
      rec_cycles <= '0;
    end else begin
      done <= 1'b0;
      unique case (phase)
        P_IDLE: if (start) begin
          dec_cycles <= '0;
          rec_cycles <= '0;
          phase      <= P_DEC;
        end
        P_DEC: begin
          dec_cycles <= dec_cycles + 1;
          if (dec_done) phase <= P_REC;
        end
        P_REC: begin
          rec_cycles <= rec_cycles + 1;
          if (rec_done) begin
            done  <= 1'b1;
            phase <= P_IDLE;
          end
        end
        default: phase <= P_IDLE;
      endcase
    end
  end

  assign busy = (phase != P_IDLE);

  wire unused_busy = dec_busy ^ rec_busy;

  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !ld_we);

endmodule
