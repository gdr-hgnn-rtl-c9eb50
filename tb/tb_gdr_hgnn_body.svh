// Shared body of the end-to-end testbenches of gdr_hgnn. The including module
// declares NV, VW, EW, CW, the number of random graphs N_RANDOM and their
// largest side MAX_SIDE, the side BIG_SIDE of one larger sparse graph (0 for
// none), the percentage VQ_READY_PCT of cycles in which the accelerator takes
// a vertex, the watchdog limit WATCHDOG in cycles, and instantiates the
// frontend as dut.
//
// Each graph is loaded through the load port in CSR form (both directions),
// restructured, and drained through the vertex FIFOs and the edge stream with
// random ready signals. Checks: the matching is maximum (against an
// independent depth-first method) and valid; every vertex leaves exactly once
// through the FIFO of its class, given by the backbone rule applied to the
// matched vertices; every edge leaves exactly once, tagged with its subgraph,
// subgraphs in pass order; statistics counters agree. The mechanisms the
// frontend has are counted over the whole run and each must have happened.

  logic clk = 0, rst_n = 0, start = 0;
  logic ld_we = 0;
  ld_sel_e ld_sel = LD_SRC_OFF;
  logic [EW-1:0] ld_addr = '0, ld_data = '0;
  logic [VW:0] nsrc = '0, ndst = '0;
  logic busy, done;
  logic [3:0] vq_valid, vq_ready;
  vid_t vq_data [4];
  logic e_valid, e_ready;
  vid_t e_src, e_dst;
  subgraph_e e_sg;
  logic [VW:0] n_matched;
  logic [CW-1:0] n_cand;
  logic [31:0] n_spills, n_flips, n_failed, stall_cycles, dec_cycles, rec_cycles;
  logic [31:0] sg_count [4];
  logic [VW-1:0] dbg_dst = '0;
  vid_t dbg_partner;

  int checks = 0, failures = 0;
  // mechanism counters
  int m_spill = 0, m_long_path = 0, m_failed = 0, m_stall = 0, m_edge_hold = 0;
  int m_sg [4] = '{0, 0, 0, 0};
  int vcls_src [int], vcls_dst [int], vcnt_src [int], vcnt_dst [int];
  int got_s [$], got_d [$], got_g [$];

  always #5 clk = ~clk;

  always @(negedge clk) begin
    for (int q = 0; q < 4; q++) vq_ready[q] = (int'($urandom_range(99)) < VQ_READY_PCT);
    e_ready  = ($urandom_range(3) != 0);
    #1;
    if (rst_n) begin
      for (int q = 0; q < 4; q++) if (vq_valid[q] && vq_ready[q]) begin
        int id;
        id = int'(vq_data[q]);
        if (q == VC_SRC_IN || q == VC_SRC_OUT) begin
          vcnt_src[id] = vcnt_src.exists(id) ? vcnt_src[id] + 1 : 1; vcls_src[id] = q;
        end else begin
          vcnt_dst[id] = vcnt_dst.exists(id) ? vcnt_dst[id] + 1 : 1; vcls_dst[id] = q;
        end
      end
      if (e_valid) begin
        if (e_ready) begin
          got_s.push_back(int'(e_src)); got_d.push_back(int'(e_dst)); got_g.push_back(int'(e_sg));
        end else m_edge_hold++;
      end
    end
  end

  task automatic ld(ld_sel_e sel, int addr, int data);
    @(negedge clk);
    ld_we = 1; ld_sel = sel; ld_addr = EW'(addr); ld_data = EW'(data);
  endtask

  task automatic run_one(graph_c g);
    bit ms [$], md [$];
    int ref_m, t0;
    g.build_csr();
    for (int s = 0; s <= g.ns; s++) ld(LD_SRC_OFF, s, g.soff[s]);
    for (int d = 0; d <= g.nd; d++) ld(LD_DST_OFF, d, g.doff[d]);
    for (int i = 0; i < g.ne; i++) ld(LD_SRC_NBR, i, g.snbr[i]);
    for (int i = 0; i < g.ne; i++) ld(LD_DST_NBR, i, g.dnbr[i]);
    @(negedge clk); ld_we = 0;
    vcnt_src.delete(); vcnt_dst.delete(); vcls_src.delete(); vcls_dst.delete();
    got_s.delete(); got_d.delete(); got_g.delete();
    nsrc = (VW+1)'(g.ns); ndst = (VW+1)'(g.nd); start = 1;
    @(negedge clk); start = 0;
    t0 = 0;
    while (!done) begin @(negedge clk); t0++; end
    repeat (100) @(negedge clk);
    // matching
    ref_m = g.ref_max_matching();
    checks++;
    if (int'(n_matched) != ref_m || int'(n_cand) != 2 * ref_m) begin
      failures++; $display("matched %0d cand %0d, maximum %0d", n_matched, n_cand, ref_m);
    end
    for (int s = 0; s < g.ns; s++) ms.push_back(dut.matched_src[s]);
    for (int d = 0; d < g.nd; d++) begin
      md.push_back(dut.matched_dst[d]);
      if (dut.matched_dst[d]) begin
        dbg_dst = VW'(d);
        #1;
        checks++;
        if (!g.has_edge(int'(dbg_partner), d) || !dut.matched_src[dbg_partner[VW-1:0]]) begin
          failures++; $display("bad pair %0d-%0d", dbg_partner, d);
        end
      end
    end
    // vertex classes
    for (int s = 0; s < g.ns; s++) begin
      int exp_cls;
      exp_cls = g.ref_src_in(s, ms, md) ? VC_SRC_IN : VC_SRC_OUT;
      checks++;
      if (!vcnt_src.exists(s) || vcnt_src[s] != 1 || vcls_src[s] != exp_cls) begin
        failures++; $display("src %0d: class %0d exp %0d", s, vcls_src.exists(s) ? vcls_src[s] : -1, exp_cls);
      end
    end
    for (int d = 0; d < g.nd; d++) begin
      int exp_cls;
      exp_cls = g.ref_dst_in(d, ms, md) ? VC_DST_IN : VC_DST_OUT;
      checks++;
      if (!vcnt_dst.exists(d) || vcnt_dst[d] != 1 || vcls_dst[d] != exp_cls) begin
        failures++; $display("dst %0d: class %0d exp %0d", d, vcls_dst.exists(d) ? vcls_dst[d] : -1, exp_cls);
      end
    end
    checks++;
    if (vcnt_src.num() != g.ns || vcnt_dst.num() != g.nd) begin
      failures++; $display("vertex ids out of range");
    end
    // edges
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
      m_sg[got_g[i]]++;
    end
    checks++;
    if (int'(sg_count[0] + sg_count[1] + sg_count[2] + sg_count[3]) != g.ne) failures++;
    // epoch length: both phases counted, and they add up to the run time
    checks++;
    if (int'(dec_cycles + rec_cycles) + 1 != t0 + 1 && int'(dec_cycles + rec_cycles) != t0) begin
      failures++; $display("phase cycles %0d + %0d vs %0d", dec_cycles, rec_cycles, t0);
    end
    m_spill     += int'(n_spills);
    m_long_path += int'(n_flips) - int'(n_matched);
    m_failed    += int'(n_failed);
    m_stall     += int'(stall_cycles);
    $display("graph %0dx%0d, %0d edges: matching %0d, decouple %0d cycles, recouple %0d cycles, subgraph edges %0d/%0d/%0d uncovered %0d",
             g.ns, g.nd, g.ne, n_matched, dec_cycles, rec_cycles, sg_count[0], sg_count[1], sg_count[2], sg_count[3]);
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    graph_c g;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // a graph shaped like the usual illustration: one hub source, one hub
    // destination, and leaves around them
    g = new(4, 5);
    g.add_edge(0, 2); g.add_edge(1, 0); g.add_edge(1, 1); g.add_edge(1, 2); g.add_edge(1, 3);
    g.add_edge(2, 2); g.add_edge(3, 2); g.add_edge(3, 3); g.add_edge(3, 4);
    run_one(g);
    // a complete 3x3 block is perfectly matched: no backbone vertex, so every
    // edge is uncovered by the selection rule
    g = new(3, 3);
    for (int s = 0; s < 3; s++) for (int d = 0; d < 3; d++) g.add_edge(s, d);
    run_one(g);
    for (int t = 0; t < N_RANDOM; t++) begin
      g = new(4 + $urandom_range(MAX_SIDE - 4), 4 + $urandom_range(MAX_SIDE - 4));
      g.randomize_edges(2 + $urandom_range(8));
      run_one(g);
    end
    if (BIG_SIDE > 0) begin
      g = new(BIG_SIDE, BIG_SIDE);
      g.randomize_degree(3);
      run_one(g);
    end
    $display("mechanisms: FIFO spills %0d, multi-step path flips %0d, failed searches %0d, vertex FIFO stalls %0d, edge stream holds %0d, edges per subgraph %0d/%0d/%0d, uncovered %0d",
             m_spill, m_long_path, m_failed, m_stall, m_edge_hold, m_sg[0], m_sg[1], m_sg[2], m_sg[3]);
    checks += 8;
    if (m_spill == 0)     begin failures++; $display("no matching FIFO replacement"); end
    if (m_long_path == 0) begin failures++; $display("no multi-step augmenting path"); end
    if (m_failed == 0)    begin failures++; $display("no failed search"); end
    if (m_stall == 0)     begin failures++; $display("no vertex FIFO stall"); end
    if (m_edge_hold == 0) begin failures++; $display("no edge back-pressure"); end
    for (int p = 0; p < 4; p++) if (m_sg[p] == 0) begin failures++; $display("subgraph %0d never produced", p); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
