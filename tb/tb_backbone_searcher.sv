// tb_backbone_searcher: random graphs with a greedy maximal matching chosen
// by the testbench. The candidates (matched sources, then matched
// destinations) sit in a testbench array read like the Candidate Buffer; the
// four FIFO full flags are driven at random to exercise stalls. Every vertex
// must be pushed exactly once, into the class given by the backbone rule
// computed independently here, and the src_in/dst_in bitmaps must agree.
module tb_backbone_searcher;
  import gdr_pkg::*;
  import tb_graph_pkg::*;
  localparam int NV = 64, CAND_W = 128, ADJ_W = 4096;
  localparam int VW = $clog2(NV), EW = $clog2(ADJ_W + 1), CW = $clog2(CAND_W + 1);

  logic clk = 0, rst_n = 0, start = 0;
  logic [VW:0] nsrc = '0, ndst = '0;
  logic [CW-1:0] ncand = '0;
  logic busy, done;
  logic [CW-1:0] cand_addr;
  cand_t cand_data;
  logic s_off_we = 0, s_nbr_we = 0, d_off_we = 0, d_nbr_we = 0;
  logic [VW:0] ld_off_addr = '0;
  logic [EW-1:0] ld_off_data = '0, ld_nbr_addr = '0;
  vid_t ld_nbr_data = '0;
  logic [VW-1:0] src_row_idx, dst_row_idx;
  logic [EW-1:0] src_row_begin, src_row_end, src_nbr_addr, dst_row_begin, dst_row_end, dst_nbr_addr;
  vid_t src_nbr_data, dst_nbr_data;
  logic [NV-1:0] matched_src = '0, matched_dst = '0, src_in, dst_in;
  logic [3:0] vq_push, vq_full;
  vid_t vq_din [4];
  logic [31:0] stall_cycles;

  cand_t cmem [CAND_W];
  int checks = 0, failures = 0, tot_stalls = 0;
  int cls_src [NV], cls_dst [NV], pushes_src [NV], pushes_dst [NV];

  assign cand_data = cmem[cand_addr[$clog2(CAND_W)-1:0]];

  adj_list_buffer #(.NV(NV), .WORDS(ADJ_W)) u_sadj (
    .clk, .off_we(s_off_we), .off_addr(ld_off_addr), .off_data(ld_off_data),
    .nbr_we(s_nbr_we), .nbr_waddr(ld_nbr_addr), .nbr_wdata(ld_nbr_data),
    .row_idx(src_row_idx), .row_begin(src_row_begin), .row_end(src_row_end),
    .nbr_addr(src_nbr_addr), .nbr_data(src_nbr_data));
  adj_list_buffer #(.NV(NV), .WORDS(ADJ_W)) u_dadj (
    .clk, .off_we(d_off_we), .off_addr(ld_off_addr), .off_data(ld_off_data),
    .nbr_we(d_nbr_we), .nbr_waddr(ld_nbr_addr), .nbr_wdata(ld_nbr_data),
    .row_idx(dst_row_idx), .row_begin(dst_row_begin), .row_end(dst_row_end),
    .nbr_addr(dst_nbr_addr), .nbr_data(dst_nbr_data));
  backbone_searcher #(.NV(NV), .CAND_W(CAND_W), .ADJ_W(ADJ_W)) dut (.*);

  always #5 clk = ~clk;

  // full flags change at the falling edge; pushes are sampled just after,
  // when they are settled for the coming rising edge
  always @(negedge clk) begin
    vq_full = 4'($urandom) & 4'($urandom);
    #1;
    if (rst_n) begin
      for (int q = 0; q < 4; q++) if (vq_push[q]) begin
        int id;
        id = int'(vq_din[q]);
        if (q == VC_SRC_IN || q == VC_SRC_OUT) begin pushes_src[id]++; cls_src[id] = q; end
        else begin pushes_dst[id]++; cls_dst[id] = q; end
      end
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(graph_c g);
    for (int s = 0; s <= g.ns; s++) begin
      @(negedge clk); s_off_we = 1; ld_off_addr = (VW+1)'(s); ld_off_data = EW'(g.soff[s]);
    end
    @(negedge clk); s_off_we = 0;
    for (int d = 0; d <= g.nd; d++) begin
      @(negedge clk); d_off_we = 1; ld_off_addr = (VW+1)'(d); ld_off_data = EW'(g.doff[d]);
    end
    @(negedge clk); d_off_we = 0;
    for (int i = 0; i < g.ne; i++) begin
      @(negedge clk); s_nbr_we = 1; ld_nbr_addr = EW'(i); ld_nbr_data = vid_t'(g.snbr[i]);
    end
    @(negedge clk); s_nbr_we = 0;
    for (int i = 0; i < g.ne; i++) begin
      @(negedge clk); d_nbr_we = 1; ld_nbr_addr = EW'(i); ld_nbr_data = vid_t'(g.dnbr[i]);
    end
    @(negedge clk); d_nbr_we = 0;
  endtask

  task automatic run_one(graph_c g);
    bit ms [$], md [$];
    int nc;
    g.build_csr();
    load(g);
    // greedy maximal matching
    for (int s = 0; s < g.ns; s++) ms.push_back(0);
    for (int d = 0; d < g.nd; d++) md.push_back(0);
    for (int i = 0; i < g.ne; i++) if (!ms[g.es[i]] && !md[g.ed[i]]) begin
      ms[g.es[i]] = 1; md[g.ed[i]] = 1;
    end
    nc = 0;
    for (int s = 0; s < g.ns; s++) if (ms[s]) begin cmem[nc] = '{is_dst: 1'b0, id: 15'(s)}; nc++; end
    for (int d = 0; d < g.nd; d++) if (md[d]) begin cmem[nc] = '{is_dst: 1'b1, id: 15'(d)}; nc++; end
    matched_src = '0; matched_dst = '0;
    for (int s = 0; s < g.ns; s++) matched_src[s] = ms[s];
    for (int d = 0; d < g.nd; d++) matched_dst[d] = md[d];
    foreach (pushes_src[i]) begin pushes_src[i] = 0; pushes_dst[i] = 0; end
    @(negedge clk);
    nsrc = (VW+1)'(g.ns); ndst = (VW+1)'(g.nd); ncand = CW'(nc); start = 1;
    @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    for (int s = 0; s < g.ns; s++) begin
      int exp_cls = g.ref_src_in(s, ms, md) ? VC_SRC_IN : VC_SRC_OUT;
      checks++;
      if (pushes_src[s] != 1 || cls_src[s] != exp_cls || src_in[s] != (exp_cls == VC_SRC_IN)) begin
        failures++; $display("src %0d pushed %0d class %0d exp %0d", s, pushes_src[s], cls_src[s], exp_cls);
      end
    end
    for (int d = 0; d < g.nd; d++) begin
      int exp_cls = g.ref_dst_in(d, ms, md) ? VC_DST_IN : VC_DST_OUT;
      checks++;
      if (pushes_dst[d] != 1 || cls_dst[d] != exp_cls || dst_in[d] != (exp_cls == VC_DST_IN)) begin
        failures++; $display("dst %0d pushed %0d class %0d exp %0d", d, pushes_dst[d], cls_dst[d], exp_cls);
      end
    end
    tot_stalls += int'(stall_cycles);
  endtask

  initial begin
    graph_c g;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 16; t++) begin
      g = new(4 + $urandom_range(NV - 4), 4 + $urandom_range(NV - 4));
      g.randomize_edges(2 + $urandom_range(12));
      run_one(g);
    end
    checks++;
    if (tot_stalls == 0) begin failures++; $display("no FIFO stall"); end
    $display("stall cycles %0d", tot_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
