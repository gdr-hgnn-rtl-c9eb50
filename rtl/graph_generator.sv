// graph_generator: emits the restructured graph as three subgraphs.
//
// Once every vertex has a class, the generator walks the out-neighbour lists
// of the Src Adj. buffer once per subgraph and emits each edge (s, d) in the
// pass whose classes it joins:
//   pass 0, SG_OUT_IN : s in Src_out, d in Dst_in
//   pass 1, SG_IN_IN  : s in Src_in,  d in Dst_in
//   pass 2, SG_IN_OUT : s in Src_in,  d in Dst_out
//   pass 3, SG_UNCOVERED : s in Src_out, d in Dst_out
// so the accelerator receives each subgraph as one contiguous group. Pass 3
// exists because the backbone selection rule can leave a matched edge whose
// two ends both have only matched neighbours outside the backbone (a perfectly
// matched component is the simplest case); such edges would otherwise be
// lost. Rows whose source class cannot contribute to a pass are skipped in
// one cycle.
//
// Interface and timing: pulse start; edges leave on e_valid/e_ready (a
// valid-ready handshake: an edge is taken in a cycle with both high, and
// e_valid with its payload holds until then). One neighbour word is examined
// per cycle; an edge not taken holds the walk. sg_count[p] counts the edges of
// pass p. done pulses after the last pass.
//
// Following the source: the three subgraphs and their vertex classes
// (Src_out/Dst_in, Src_in/Dst_in, Src_in/Dst_out). This design's choices: the
// pass-per-subgraph order, the edge stream format and the fourth pass.
module graph_generator
  import gdr_pkg::*;
#(
  parameter int unsigned NV    = NV_MAX,
  parameter int unsigned ADJ_W = ADJ_WORDS,
  localparam int unsigned VW   = $clog2(NV),
  localparam int unsigned EW   = $clog2(ADJ_W + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [VW:0]   nsrc,
  output logic          busy,
  output logic          done,
  input  logic [NV-1:0] src_in,
  input  logic [NV-1:0] dst_in,
  // Src Adj. read port
  output logic [VW-1:0] row_idx,
  input  logic [EW-1:0] row_begin,
  input  logic [EW-1:0] row_end,
  output logic [EW-1:0] nbr_addr,
  input  vid_t          nbr_data,
  // edge stream
  output logic          e_valid,
  input  logic          e_ready,
  output vid_t          e_src,
  output vid_t          e_dst,
  output subgraph_e     e_sg,
  output logic [31:0]   sg_count [4]
);

  typedef enum logic [1:0] {S_IDLE, S_ROW, S_EDGE, S_DONE} state_e;

  state_e        state;
  subgraph_e     pass;
  logic [VW:0]   s;
  logic [EW-1:0] ptr, pend;

  wire [VW-1:0] s_id  = s[VW-1:0];
  wire [VW-1:0] d_id  = nbr_data[VW-1:0];
  wire          s_in  = src_in[s_id];
  wire          d_in  = dst_in[d_id];

  // the subgraph an edge from s to d belongs to
  subgraph_e edge_sg;
  always_comb begin
    unique case ({s_in, d_in})
      2'b01:   edge_sg = SG_OUT_IN;
      2'b11:   edge_sg = SG_IN_IN;
      2'b10:   edge_sg = SG_IN_OUT;
      default: edge_sg = SG_UNCOVERED;
    endcase
  end

  // can a row whose source has this class hold edges of this pass?
  wire row_useful = (pass == SG_IN_IN || pass == SG_IN_OUT) ? s_in : !s_in;
  wire at_end     = (ptr == pend);

  assign row_idx  = s_id;
  assign nbr_addr = ptr;
  assign e_valid  = (state == S_EDGE) && !at_end && (edge_sg == pass);
  assign e_src    = vid_t'(s_id);
  assign e_dst    = nbr_data;
  assign e_sg     = pass;
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pass  <= SG_OUT_IN;
      s     <= '0;
      ptr   <= '0;
      pend  <= '0;
      done  <= 1'b0;
      for (int p = 0; p < 4; p++) sg_count[p] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          pass  <= SG_OUT_IN;
          s     <= '0;
          for (int p = 0; p < 4; p++) sg_count[p] <= '0;
          state <= S_ROW;
        end
        S_ROW: begin
          if (s >= nsrc) begin
            s <= '0;
            if (pass == SG_UNCOVERED) state <= S_DONE;
            else pass <= subgraph_e'(pass + 2'd1);
          end else if (row_useful) begin
            ptr   <= row_begin;
            pend  <= row_end;
            state <= S_EDGE;
          end else begin
            s <= s + 1'b1;
          end
        end
        S_EDGE: begin
          if (at_end) begin
            s     <= s + 1'b1;
            state <= S_ROW;
          end else if (!e_valid || e_ready) begin
            ptr <= ptr + 1'b1;
            if (e_valid) sg_count[pass] <= sg_count[pass] + 1;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_edge_stable: assert property (@(posedge clk) disable iff (!rst_n)
                   e_valid && !e_ready |=> e_valid && $stable(e_src) && $stable(e_dst));

endmodule
