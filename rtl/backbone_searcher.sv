// backbone_searcher: selects the graph backbone from the backbone candidates
// and sorts every vertex into one of four classes.
//
// The candidates (matched vertices) are read from the Candidate Buffer in
// order. A source candidate s reads its out-neighbours from the Src Adj.
// buffer and tests each against the Matching Bm.: every unmatched neighbour
// goes to Dst_out, and s itself goes to Src_in as soon as it has one. A
// destination candidate d reads its in-neighbours from the Dst Adj. buffer in
// the same way: unmatched neighbours go to Src_out and d goes to Dst_in. A
// candidate with no unmatched neighbour is passed over. Afterwards all source
// vertices not yet placed go to Src_out and all destination vertices not yet
// placed go to Dst_out. Every vertex is pushed exactly once: the class
// bitmaps (src_in/dst_in, and the "already pushed" bitmaps of the out
// classes) suppress repeats.
//
// Interface and timing: pulse start with nsrc, ndst, ncand stable; done pulses
// when the last vertex has been pushed. One neighbour or one leftover vertex
// is handled per cycle, and one cycle per candidate to fetch it; a push into a
// full output FIFO stalls the searcher (stall_cycles counts those cycles).
// The Candidate Buffer and adjacency read ports answer in the same cycle.
// src_in/dst_in stay valid after done for the graph generator.
//
// Following the source (Algorithm 2 and the Recoupler figure): candidate
// buffer -> Src/Dst Adj. buffers -> Matching Bm. test -> the four FIFOs, sources
// before destinations, leftovers last. This design's choices: deduplication
// with bitmaps, pushing a candidate on its first unmatched neighbour, and the
// stall on a full FIFO.
module backbone_searcher
  import gdr_pkg::*;
#(
  parameter int unsigned NV     = NV_MAX,
  parameter int unsigned CAND_W = CAND_WORDS,
  parameter int unsigned ADJ_W  = ADJ_WORDS,
  localparam int unsigned VW    = $clog2(NV),
  localparam int unsigned EW    = $clog2(ADJ_W + 1),
  localparam int unsigned CW    = $clog2(CAND_W + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [VW:0]   nsrc,
  input  logic [VW:0]   ndst,
  input  logic [CW-1:0] ncand,
  output logic          busy,
  output logic          done,
  // Candidate Buffer read port
  output logic [CW-1:0] cand_addr,
  input  cand_t         cand_data,
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
  // Matching Bm.
  input  logic [NV-1:0] matched_src,
  input  logic [NV-1:0] matched_dst,
  // the four vertex FIFOs, indexed by vclass_e
  output logic [3:0]    vq_push,
  output vid_t          vq_din [4],
  input  logic [3:0]    vq_full,
  // classification result
  output logic [NV-1:0] src_in,
  output logic [NV-1:0] dst_in,
  output logic [31:0]   stall_cycles
);

  typedef enum logic [2:0] {S_IDLE, S_CAND, S_NBR, S_REST_S, S_REST_D, S_DONE} state_e;

  state_e        state;
  logic [CW-1:0] ci;
  cand_t         c;
  logic          found;
  logic [EW-1:0] ptr, pend;
  logic [VW:0]   k;

  // class bitmaps
  logic          bm_clr;
  logic          si_set, so_set, di_set, do_set;
  logic [VW-1:0] si_idx, so_idx, di_idx, do_idx;
  logic [NV-1:0] src_out_seen, dst_out_seen;
  logic          unused_si, unused_so, unused_di, unused_do;

  bitmap #(.N(NV)) u_src_in_bm  (.clk, .rst_n, .clr(bm_clr), .set_en(si_set), .set_idx(si_idx),
                                 .test_idx(si_idx), .test_bit(unused_si), .bits(src_in));
  bitmap #(.N(NV)) u_src_out_bm (.clk, .rst_n, .clr(bm_clr), .set_en(so_set), .set_idx(so_idx),
                                 .test_idx(so_idx), .test_bit(unused_so), .bits(src_out_seen));
  bitmap #(.N(NV)) u_dst_in_bm  (.clk, .rst_n, .clr(bm_clr), .set_en(di_set), .set_idx(di_idx),
                                 .test_idx(di_idx), .test_bit(unused_di), .bits(dst_in));
  bitmap #(.N(NV)) u_dst_out_bm (.clk, .rst_n, .clr(bm_clr), .set_en(do_set), .set_idx(do_idx),
                                 .test_idx(do_idx), .test_bit(unused_do), .bits(dst_out_seen));

  wire           c_dst    = c.is_dst;
  wire [VW-1:0]  c_id     = c.id[VW-1:0];
  wire           nbr_last = (ptr == pend);
  wire vid_t     x        = c_dst ? dst_nbr_data : src_nbr_data;
  wire [VW-1:0]  x_id     = x[VW-1:0];
  // is the neighbour outside the candidate set?
  wire           x_free   = c_dst ? !matched_src[x_id] : !matched_dst[x_id];
  wire           x_seen   = c_dst ? src_out_seen[x_id] : dst_out_seen[x_id];
  wire           need_out = x_free && !x_seen;
  wire           need_in  = x_free && !found;
  wire [1:0]     q_out    = c_dst ? VC_SRC_OUT : VC_DST_OUT;
  wire [1:0]     q_in     = c_dst ? VC_DST_IN  : VC_SRC_IN;
  wire           nbr_ok   = (!need_out || !vq_full[q_out]) && (!need_in || !vq_full[q_in]);

  wire           rest_s_place = (k < nsrc) && !src_in[k[VW-1:0]] && !src_out_seen[k[VW-1:0]];
  wire           rest_d_place = (k < ndst) && !dst_in[k[VW-1:0]] && !dst_out_seen[k[VW-1:0]];

  always_comb begin
    cand_addr    = ci;
    src_row_idx  = cand_data.id[VW-1:0];
    dst_row_idx  = cand_data.id[VW-1:0];
    src_nbr_addr = ptr;
    dst_nbr_addr = ptr;
    vq_push      = '0;
    for (int q = 0; q < 4; q++) vq_din[q] = x;
    bm_clr = 1'b0;
    si_set = 1'b0; so_set = 1'b0; di_set = 1'b0; do_set = 1'b0;
    si_idx = c_id; di_idx = c_id; so_idx = x_id; do_idx = x_id;
    unique case (state)
      S_IDLE: bm_clr = start;
      S_NBR: begin
        vq_din[q_in] = vid_t'(c_id);
        if (!nbr_last && nbr_ok) begin
          if (need_out) begin
            vq_push[q_out] = 1'b1;
            if (c_dst) so_set = 1'b1; else do_set = 1'b1;
          end
          if (need_in) begin
            vq_push[q_in] = 1'b1;
            if (c_dst) di_set = 1'b1; else si_set = 1'b1;
          end
        end
      end
      S_REST_S: begin
        vq_din[VC_SRC_OUT] = vid_t'(k);
        so_idx = k[VW-1:0];
        if (rest_s_place && !vq_full[VC_SRC_OUT]) begin
          vq_push[VC_SRC_OUT] = 1'b1;
          so_set = 1'b1;
        end
      end
      S_REST_D: begin
        vq_din[VC_DST_OUT] = vid_t'(k);
        do_idx = k[VW-1:0];
        if (rest_d_place && !vq_full[VC_DST_OUT]) begin
          vq_push[VC_DST_OUT] = 1'b1;
          do_set = 1'b1;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      ci           <= '0;
      c            <= '0;
      found        <= 1'b0;
      ptr          <= '0;
      pend         <= '0;
      k            <= '0;
      done         <= 1'b0;
      stall_cycles <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          ci           <= '0;
          stall_cycles <= '0;
          state        <= S_CAND;
        end
        S_CAND: begin
          if (ci >= ncand) begin
            k     <= '0;
            state <= S_REST_S;
          end else begin
            c     <= cand_data;
            found <= 1'b0;
            ptr   <= cand_data.is_dst ? dst_row_begin : src_row_begin;
            pend  <= cand_data.is_dst ? dst_row_end   : src_row_end;
            state <= S_NBR;
          end
        end
        S_NBR: begin
          if (nbr_last) begin
            ci    <= ci + 1'b1;
            state <= S_CAND;
          end else if (!nbr_ok) begin
            stall_cycles <= stall_cycles + 1;
          end else begin
            if (need_in) found <= 1'b1;
            ptr <= ptr + 1'b1;
          end
        end
        S_REST_S: begin
          if (k >= nsrc) begin
            k     <= '0;
            state <= S_REST_D;
          end else if (rest_s_place && vq_full[VC_SRC_OUT]) stall_cycles <= stall_cycles + 1;
          else k <= k + 1'b1;
        end
        S_REST_D: begin
          if (k >= ndst) state <= S_DONE;
          else if (rest_d_place && vq_full[VC_DST_OUT]) stall_cycles <= stall_cycles + 1;
          else k <= k + 1'b1;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
