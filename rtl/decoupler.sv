// decoupler: graph decoupling, i.e. a maximum matching of the bipartite
// semantic graph, found one augmenting path at a time.
//
// For every source vertex n that is still unmatched, a breadth-first search
// for an augmenting path starts: n goes into the Search_List; each source u
// popped from it has its out-neighbours v read from the Src Adj. buffer. A
// destination already in the Visited Bm. is skipped. Otherwise it is marked
// visited and u is pushed into Matching_FIFO[v] (the hash table and
// set-associative FIFOs; an entry they replace is parked in the Matching
// Buffer). If v is unmatched the path is complete and is flipped from v back
// to n: each step writes the pair (u, v) into the Matching Buffer, takes the
// destination that u was matched to before, and pops that destination's
// Matching_FIFO to find the next source back along the path. If v is matched,
// its partner source joins the Search_List. A search whose Search_List runs
// dry leaves n unmatched; by Berge's theorem the result is then a maximum
// matching. At the end every matched vertex (the Matching Bm.) is streamed out
// once as a backbone candidate, sources first, then destinations.
//
// Matching Buffer layout (16-bit words): partner of source u at u, partner of
// destination v at NV + v, a replaced Matching_FIFO entry of v at 2*NV + v. A
// partner word is meaningful only where the Matching Bm. bit is set, so the
// buffer is never cleared.
//
// Interface and timing: pulse start with nsrc/ndst stable; busy stays high
// until done pulses for one cycle. One neighbour is examined per cycle; a
// source popped from the Search_List costs one cycle, a search setup two, each
// step of flipping a path two, and the final candidate dump one cycle per
// vertex. The Src Adj. read port (row_idx/row_begin/row_end,
// nbr_addr/nbr_data) must answer in the same cycle. dbg_dst/dbg_partner read
// the partner of a destination while the block is idle.
//
// Following the source (Algorithm 1 and the Decoupler description): the
// Search_List, the per-destination Matching_FIFO holding the vertex that
// reached it, the pop of those FIFOs while the match is rewritten, the visited
// check, the Matching and Candidate Buffers. This design's choices: the
// breadth-first order, clearing the Visited Bm. per search, the buffer layout
// and the cycle costs above.
module decoupler
  import gdr_pkg::*;
#(
  parameter int unsigned NV       = NV_MAX,
  parameter int unsigned MB_W     = MB_WORDS,
  parameter int unsigned ADJ_W    = ADJ_WORDS,
  parameter int unsigned SETS     = MF_SETS,
  parameter int unsigned WAYS     = MF_WAYS,
  localparam int unsigned VW      = $clog2(NV),
  localparam int unsigned EW      = $clog2(ADJ_W + 1),
  localparam int unsigned MAW     = $clog2(MB_W)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [VW:0]   nsrc,
  input  logic [VW:0]   ndst,
  output logic          busy,
  output logic          done,
  // Src Adj. read port
  output logic [VW-1:0] row_idx,
  input  logic [EW-1:0] row_begin,
  input  logic [EW-1:0] row_end,
  output logic [EW-1:0] nbr_addr,
  input  vid_t          nbr_data,
  // backbone candidates, one per cycle
  output logic          cand_valid,
  output cand_t         cand,
  // Matching Bm.
  output logic [NV-1:0] matched_src,
  output logic [NV-1:0] matched_dst,
  // statistics of the last run
  output logic [VW:0]   n_matched,
  output logic [31:0]   n_spills,
  output logic [31:0]   n_flips,
  output logic [31:0]   n_failed,
  // partner lookup while idle
  input  logic [VW-1:0] dbg_dst,
  output vid_t          dbg_partner
);

  localparam int unsigned SRC_BASE = 0;
  localparam int unsigned DST_BASE = NV;
  localparam int unsigned PAR_BASE = 2 * NV;

  initial begin
    if (3 * NV > MB_W) $error("Matching Buffer too small for 3*NV words");
  end

  typedef enum logic [3:0] {
    S_IDLE, S_NEXT, S_SEED, S_POP, S_SCAN, S_FLIP_D, S_FLIP_S, S_DUMP_S, S_DUMP_D, S_DONE
  } state_e;

  state_e        state;
  logic [VW:0]   n;        // start vertex of the current search / dump index
  vid_t          u;        // source being expanded
  logic [EW-1:0] ptr, pend;
  vid_t          cur_u, cur_v, next_v;
  logic          has_next;

  // ---- Matching Buffer ----------------------------------------------------
  logic           mb_we;
  logic [MAW-1:0] mb_waddr, mb_raddr_a, mb_raddr_b;
  vid_t           mb_wdata, mb_rdata_a, mb_rdata_b;

  buffer_ram #(.WORDS(MB_W), .WIDTH(VID_W)) u_matching_buffer (
    .clk, .we(mb_we), .waddr(mb_waddr), .wdata(mb_wdata),
    .raddr_a(mb_raddr_a), .rdata_a(mb_rdata_a),
    .raddr_b(mb_raddr_b), .rdata_b(mb_rdata_b)
  );

  // ---- Visited Bm. and Matching Bm. ----------------------------------------
  logic          vis_clr, vis_set, mbm_clr, ms_set, md_set;
  logic [VW-1:0] vis_idx, ms_idx, md_idx;
  logic          vis_bit, unused_ms_bit, unused_md_bit;
  logic [NV-1:0] vis_bits;

  bitmap #(.N(NV)) u_visited_bm (
    .clk, .rst_n, .clr(vis_clr), .set_en(vis_set), .set_idx(vis_idx),
    .test_idx(vis_idx), .test_bit(vis_bit), .bits(vis_bits)
  );
  bitmap #(.N(NV)) u_matching_bm_src (
    .clk, .rst_n, .clr(mbm_clr), .set_en(ms_set), .set_idx(ms_idx),
    .test_idx(ms_idx), .test_bit(unused_ms_bit), .bits(matched_src)
  );
  bitmap #(.N(NV)) u_matching_bm_dst (
    .clk, .rst_n, .clr(mbm_clr), .set_en(md_set), .set_idx(md_idx),
    .test_idx(md_idx), .test_bit(unused_md_bit), .bits(matched_dst)
  );

  // ---- Hash table + Matching FIFOs ---------------------------------------------
  logic mf_clr, mf_ins, mf_spill, mf_hit, mf_pop;
  vid_t mf_spill_key, mf_spill_val, mf_lk_key, mf_lk_val;

  match_fifo_table #(.SETS(SETS), .WAYS(WAYS)) u_match_fifos (
    .clk, .rst_n, .clr(mf_clr),
    .ins_en(mf_ins), .ins_key(nbr_data), .ins_val(u),
    .spill_valid(mf_spill), .spill_key(mf_spill_key), .spill_val(mf_spill_val),
    .lk_key(mf_lk_key), .lk_hit(mf_hit), .lk_val(mf_lk_val), .pop_en(mf_pop)
  );

  // ---- Search_List ---------------------------------------------------------
  logic sl_clr, sl_push, sl_pop, sl_empty, sl_full;
  vid_t sl_din, sl_dout;
  logic [$clog2(NV+1)-1:0] sl_count;

  sync_fifo #(.WIDTH(VID_W), .DEPTH(NV)) u_search_list (
    .clk, .rst_n, .clr(sl_clr), .push(sl_push), .din(sl_din), .pop(sl_pop),
    .dout(sl_dout), .empty(sl_empty), .full(sl_full), .count(sl_count)
  );

  // ---- datapath ------------------------------------------------------------
  wire [VW-1:0] v_idx     = nbr_data[VW-1:0];
  wire          scan_end  = (ptr == pend);
  wire          v_visited = vis_bit;
  wire          v_free    = !matched_dst[v_idx];

  always_comb begin
    row_idx    = sl_dout[VW-1:0];
    nbr_addr   = ptr;
    mb_we      = 1'b0;
    mb_waddr   = '0;
    mb_wdata   = '0;
    mb_raddr_a = MAW'(DST_BASE) + MAW'(v_idx);
    mb_raddr_b = MAW'(PAR_BASE) + MAW'(next_v[VW-1:0]);
    vis_clr    = 1'b0;
    vis_set    = 1'b0;
    vis_idx    = v_idx;
    mbm_clr    = 1'b0;
    ms_set     = 1'b0;
    ms_idx     = cur_u[VW-1:0];
    md_set     = 1'b0;
    md_idx     = cur_v[VW-1:0];
    mf_clr     = 1'b0;
    mf_ins     = 1'b0;
    mf_pop     = 1'b0;
    mf_lk_key  = next_v;
    sl_clr     = 1'b0;
    sl_push    = 1'b0;
    sl_din     = mb_rdata_a;
    sl_pop     = 1'b0;
    cand_valid = 1'b0;
    cand       = '{is_dst: 1'b0, id: (VID_W-1)'(n)};
    unique case (state)
      S_IDLE: begin
        mbm_clr    = start;
        mb_raddr_a = MAW'(DST_BASE) + MAW'(dbg_dst);
      end
      S_NEXT: begin
        vis_clr = 1'b1;
        mf_clr  = 1'b1;
        sl_clr  = 1'b1;
      end
      S_SEED: begin
        sl_push = 1'b1;
        sl_din  = vid_t'(n);
      end
      S_POP: begin
        sl_pop = !sl_empty;
      end
      S_SCAN: begin
        if (!scan_end && !v_visited) begin
          vis_set = 1'b1;
          mf_ins  = 1'b1;
          if (mf_spill) begin
            mb_we    = 1'b1;
            mb_waddr = MAW'(PAR_BASE) + MAW'(mf_spill_key[VW-1:0]);
            mb_wdata = mf_spill_val;
          end
          // a matched destination hands its partner to the Search_List
          if (!v_free) sl_push = 1'b1;
        end
      end
      S_FLIP_D: begin
        // destination cur_v takes cur_u; read what cur_u was matched to
        mb_raddr_a = MAW'(SRC_BASE) + MAW'(cur_u[VW-1:0]);
        mb_we      = 1'b1;
        mb_waddr   = MAW'(DST_BASE) + MAW'(cur_v[VW-1:0]);
        mb_wdata   = cur_u;
        md_set     = 1'b1;
      end
      S_FLIP_S: begin
        mb_we    = 1'b1;
        mb_waddr = MAW'(SRC_BASE) + MAW'(cur_u[VW-1:0]);
        mb_wdata = cur_v;
        ms_set   = 1'b1;
        mf_pop   = has_next;
      end
      S_DUMP_S: begin
        cand_valid = (n < nsrc) && matched_src[n[VW-1:0]];
        cand       = '{is_dst: 1'b0, id: (VID_W-1)'(n)};
      end
      S_DUMP_D: begin
        cand_valid = (n < ndst) && matched_dst[n[VW-1:0]];
        cand       = '{is_dst: 1'b1, id: (VID_W-1)'(n)};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      n         <= '0;
      u         <= '0;
      ptr       <= '0;
      pend      <= '0;
      cur_u     <= '0;
      cur_v     <= '0;
      next_v    <= '0;
      has_next  <= 1'b0;
      n_matched <= '0;
      n_spills  <= '0;
      n_flips   <= '0;
      n_failed  <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          n         <= '0;
          n_matched <= '0;
          n_spills  <= '0;
          n_flips   <= '0;
          n_failed  <= '0;
          state     <= S_NEXT;
        end
        S_NEXT: begin
          if (n >= nsrc)                     begin n <= '0; state <= S_DUMP_S; end
          else if (matched_src[n[VW-1:0]])   n <= n + 1'b1;
          else                               state <= S_SEED;
        end
        S_SEED: state <= S_POP;
        S_POP: begin
          if (sl_empty) begin
            n_failed <= n_failed + 1;
            n        <= n + 1'b1;
            state    <= S_NEXT;
          end else begin
            u     <= sl_dout;
            ptr   <= row_begin;
            pend  <= row_end;
            state <= S_SCAN;
          end
        end
        S_SCAN: begin
          if (scan_end) state <= S_POP;
          else begin
            ptr <= ptr + 1'b1;
            if (!v_visited) begin
              if (mf_spill) n_spills <= n_spills + 1;
              if (v_free) begin
                cur_u <= u;
                cur_v <= nbr_data;
                state <= S_FLIP_D;
              end
            end
          end
        end
        S_FLIP_D: begin
          has_next <= matched_src[cur_u[VW-1:0]];
          next_v   <= mb_rdata_a;
          n_flips  <= n_flips + 1;
          state    <= S_FLIP_S;
        end
        S_FLIP_S: begin
          if (!has_next) begin
            n_matched <= n_matched + 1'b1;
            n         <= n + 1'b1;
            state     <= S_NEXT;
          end else begin
            // walk back: the destination cur_u leaves, and the source that
            // reached it, from its Matching_FIFO or from the Matching Buffer
            cur_v <= next_v;
            cur_u <= mf_hit ? mf_lk_val : mb_rdata_b;
            state <= S_FLIP_D;
          end
        end
        S_DUMP_S: begin
          if (n >= nsrc) begin n <= '0; state <= S_DUMP_D; end
          else n <= n + 1'b1;
        end
        S_DUMP_D: begin
          if (n >= ndst) state <= S_DONE;
          else n <= n + 1'b1;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy        = (state != S_IDLE);
  assign dbg_partner = mb_rdata_a;

  // Source ids fit in VW bits; the top bits of a spilled key are always zero.
  wire unused_spill_hi = ^mf_spill_key[VID_W-1:VW];

  a_search_list_room: assert property (@(posedge clk) disable iff (!rst_n) sl_push |-> !sl_full && int'(sl_count) < NV);
  a_flip_chain_hits:  assert property (@(posedge clk) disable iff (!rst_n)
                        state == S_FLIP_S && has_next |-> vis_bits[next_v[VW-1:0]]);

endmodule
