// tb_recoupler: random graphs with a greedy maximal matching chosen by the
// testbench. The matched vertices are streamed in as candidates; then the
// recoupler runs. The testbench drains the four vertex FIFOs and the edge
// stream with random ready signals (small FIFOs, so the searcher stalls) and
// checks that every vertex leaves exactly once through the FIFO of its class,
// that every edge leaves exactly once with the tag of its end classes, and
// that the subgraph tags come in pass order.
module tb_recoupler;
  import gdr_pkg::*;
  import tb_graph_pkg::*;
  localparam int NV = 64, CAND_W = 128, ADJ_W = 4096, VQ_DEPTH = 4;
  localparam int VW = $clog2(NV), EW = $clog2(ADJ_W + 1), CW = $clog2(CAND_W + 1);

  logic clk = 0, rst_n = 0, start = 0, cand_clr = 0, cand_valid = 0;
  cand_t cand = '0;
  logic [CW-1:0] n_cand;
  logic [VW:0] nsrc = '0, ndst = '0;
  logic busy, done;
  logic [NV-1:0] matched_src = '0, matched_dst = '0;
  logic s_off_we = 0, s_nbr_we = 0, d_off_we = 0, d_nbr_we = 0;
  logic [VW:0] ld_off_addr = '0;
  logic [EW-1:0] ld_off_data = '0, ld_nbr_addr = '0;
  vid_t ld_nbr_data = '0;
  logic [VW-1:0] src_row_idx, dst_row_idx;
  logic [EW-1:0] src_row_begin, src_row_end, src_nbr_addr, dst_row_begin, dst_row_end, dst_nbr_addr;
  vid_t src_nbr_data, dst_nbr_data;
  logic [3:0] vq_valid, vq_ready;
  vid_t vq_data [4];
  logic e_valid, e_ready;
  vid_t e_src, e_dst;
  subgraph_e e_sg;
  logic [31:0] stall_cycles, sg_count [4];

  int checks = 0, failures = 0, tot_stalls = 0;
  int vcls_src [NV], vcls_dst [NV], vcnt_src [NV], vcnt_dst [NV];
  int got_s [$], got_d [$], got_g [$];

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
  recoupler #(.NV(NV), .CAND_W(CAND_W), .ADJ_W(ADJ_W), .VQ_DEPTH(VQ_DEPTH)) dut (.*);

  always #5 clk = ~clk;

  always @(negedge clk) begin
    vq_ready = 4'($urandom) & 4'($urandom);
    e_ready  = ($urandom_range(2) != 0);
    #1;
    if (rst_n) begin
      for (int q = 0; q < 4; q++) if (vq_valid[q] && vq_ready[q]) begin
        int id;
        id = int'(vq_data[q]);
        if (q == VC_SRC_IN || q == VC_SRC_OUT) begin vcnt_src[id]++; vcls_src[id] = q; end
        else begin vcnt_dst[id]++; vcls_dst[id] = q; end
      end
      if (e_valid && e_ready) begin
        got_s.push_back(int'(e_src)); got_d.push_back(int'(e_dst)); got_g.push_back(int'(e_sg));
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
      @(negedge clk); s_nbr_we = 1; d_nbr_we = 1; ld_nbr_addr = EW'(i);
      ld_nbr_data = vid_t'(g.snbr[i]);
      // the two neighbour tables share the data bus: write them in turn
      d_nbr_we = 0;
      @(negedge clk); s_nbr_we = 0; d_nbr_we = 1; ld_nbr_data = vid_t'(g.dnbr[i]);
    end
    @(negedge clk); s_nbr_we = 0; d_nbr_we = 0;
  endtask

  task automatic run_one(graph_c g);
    bit ms [$], md [$];
    g.build_csr();
    load(g);
    for (int s = 0; s < g.ns; s++) ms.push_back(0);
    for (int d = 0; d < g.nd; d++) md.push_back(0);
    for (int i = 0; i < g.ne; i++) if (!ms[g.es[i]] && !md[g.ed[i]]) begin
      ms[g.es[i]] = 1; md[g.ed[i]] = 1;
    end
    matched_src = '0; matched_dst = '0;
    for (int s = 0; s < g.ns; s++) matched_src[s] = ms[s];
    for (int d = 0; d < g.nd; d++) matched_dst[d] = md[d];
    @(negedge clk); cand_clr = 1;
    @(negedge clk); cand_clr = 0;
    for (int s = 0; s < g.ns; s++) if (ms[s]) begin
      cand_valid = 1; cand = '{is_dst: 1'b0, id: 15'(s)}; @(negedge clk);
    end
    for (int d = 0; d < g.nd; d++) if (md[d]) begin
      cand_valid = 1; cand = '{is_dst: 1'b1, id: 15'(d)}; @(negedge clk);
    end
    cand_valid = 0;
    foreach (vcnt_src[i]) begin vcnt_src[i] = 0; vcnt_dst[i] = 0; end
    got_s.delete(); got_d.delete(); got_g.delete();
    nsrc = (VW+1)'(g.ns); ndst = (VW+1)'(g.nd); start = 1;
    @(negedge clk); start = 0;
    wait (done);
    // let the FIFOs drain
    repeat (200) @(negedge clk);
    for (int s = 0; s < g.ns; s++) begin
      int exp_cls;
      exp_cls = g.ref_src_in(s, ms, md) ? VC_SRC_IN : VC_SRC_OUT;
      checks++;
      if (vcnt_src[s] != 1 || vcls_src[s] != exp_cls) begin
        failures++; $display("src %0d out %0d times, class %0d exp %0d", s, vcnt_src[s], vcls_src[s], exp_cls);
      end
    end
    for (int d = 0; d < g.nd; d++) begin
      int exp_cls;
      exp_cls = g.ref_dst_in(d, ms, md) ? VC_DST_IN : VC_DST_OUT;
      checks++;
      if (vcnt_dst[d] != 1 || vcls_dst[d] != exp_cls) begin
        failures++; $display("dst %0d out %0d times, class %0d exp %0d", d, vcnt_dst[d], vcls_dst[d], exp_cls);
      end
    end
    checks++;
    if (got_s.size() != g.ne) begin failures++; $display("%0d edges, expected %0d", got_s.size(), g.ne); end
    for (int i = 0; i < got_s.size(); i++) begin
      bit si, di;
      int exp_g;
      si = g.ref_src_in(got_s[i], ms, md);
      di = g.ref_dst_in(got_d[i], ms, md);
      exp_g = di ? (si ? 1 : 0) : (si ? 2 : 3);
      checks++;
      if (!g.has_edge(got_s[i], got_d[i]) || got_g[i] != exp_g || (i > 0 && got_g[i] < got_g[i-1])) begin
        failures++; $display("edge %0d->%0d tag %0d exp %0d", got_s[i], got_d[i], got_g[i], exp_g);
      end
    end
    tot_stalls += int'(stall_cycles);
  endtask

  initial begin
    graph_c g;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      g = new(4 + $urandom_range(NV - 4), 4 + $urandom_range(NV - 4));
      g.randomize_edges(2 + $urandom_range(10));
      run_one(g);
    end
    checks++;
    if (tot_stalls == 0) begin failures++; $display("no FIFO stall"); end
    $display("stall cycles %0d", tot_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
