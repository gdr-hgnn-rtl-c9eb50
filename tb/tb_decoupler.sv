// tb_decoupler: random bipartite graphs of several sizes and densities are
// loaded into a Src Adj. buffer and matched by the decoupler. For each graph
// the testbench checks that the matching is valid (every pair is an edge, no
// vertex is used twice, the Matching Bm. agrees with the pairs), that its size
// equals a maximum matching computed by an independent depth-first method,
// and that the candidate stream lists exactly the matched vertices, sources
// first, in ascending order. A 4-set, 2-way matching FIFO table forces
// replaced entries through the Matching Buffer; the test requires that this,
// multi-step path flips and failed searches all occur.
module tb_decoupler;
  import gdr_pkg::*;
  import tb_graph_pkg::*;
  localparam int NV = 64, MB_W = 192, ADJ_W = 4096, SETS = 4, WAYS = 2;
  localparam int VW = $clog2(NV), EW = $clog2(ADJ_W + 1);

  logic clk = 0, rst_n = 0, start = 0;
  logic [VW:0] nsrc = '0, ndst = '0;
  logic busy, done;
  logic off_we = 0, nbr_we = 0;
  logic [VW:0] off_addr = '0;
  logic [EW-1:0] off_data = '0, nbr_waddr = '0;
  vid_t nbr_wdata = '0;
  logic [VW-1:0] row_idx;
  logic [EW-1:0] row_begin, row_end, nbr_addr;
  vid_t nbr_data;
  logic cand_valid;
  cand_t cand;
  logic [NV-1:0] matched_src, matched_dst;
  logic [VW:0] n_matched;
  logic [31:0] n_spills, n_flips, n_failed;
  logic [VW-1:0] dbg_dst = '0;
  vid_t dbg_partner;

  int checks = 0, failures = 0;
  int tot_spills = 0, tot_extra_flips = 0, tot_failed = 0;
  cand_t cands [$];

  adj_list_buffer #(.NV(NV), .WORDS(ADJ_W)) u_adj (.*);
  decoupler #(.NV(NV), .MB_W(MB_W), .ADJ_W(ADJ_W), .SETS(SETS), .WAYS(WAYS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (cand_valid) cands.push_back(cand);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(graph_c g);
    for (int s = 0; s <= g.ns; s++) begin
      @(negedge clk); off_we = 1; off_addr = (VW+1)'(s); off_data = EW'(g.soff[s]);
    end
    @(negedge clk); off_we = 0;
    for (int i = 0; i < g.snbr.size(); i++) begin
      @(negedge clk); nbr_we = 1; nbr_waddr = EW'(i); nbr_wdata = vid_t'(g.snbr[i]);
    end
    @(negedge clk); nbr_we = 0;
  endtask

  task automatic run_one(graph_c g);
    int ref_m, nm;
    bit used_src [NV];
    g.build_csr();
    load(g);
    cands.delete();
    @(negedge clk);
    nsrc = (VW+1)'(g.ns); ndst = (VW+1)'(g.nd); start = 1;
    @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    ref_m = g.ref_max_matching();
    checks++;
    if (int'(n_matched) != ref_m) begin
      failures++; $display("graph %0dx%0d e=%0d: matched %0d, maximum %0d", g.ns, g.nd, g.ne, n_matched, ref_m);
    end
    // pairs
    foreach (used_src[i]) used_src[i] = 0;
    nm = 0;
    for (int d = 0; d < g.nd; d++) if (matched_dst[d]) begin
      dbg_dst = VW'(d);
      #1;
      nm++;
      checks++;
      if (!g.has_edge(int'(dbg_partner), d) || !matched_src[dbg_partner[VW-1:0]] ||
          used_src[dbg_partner[VW-1:0]]) begin
        failures++; $display("bad pair dst %0d src %0d", d, dbg_partner);
      end
      used_src[dbg_partner[VW-1:0]] = 1;
    end
    checks++;
    if (nm != int'(n_matched) || $countones(matched_src) != int'(n_matched)) begin
      failures++; $display("bitmap counts %0d %0d vs %0d", nm, $countones(matched_src), n_matched);
    end
    // candidate stream
    checks++;
    if (cands.size() != 2 * int'(n_matched)) begin
      failures++; $display("candidates %0d, expected %0d", cands.size(), 2 * n_matched);
    end else begin
      int k = 0;
      for (int s = 0; s < g.ns; s++) if (matched_src[s]) begin
        if (cands[k].is_dst || int'(cands[k].id) != s) failures++;
        k++;
      end
      for (int d = 0; d < g.nd; d++) if (matched_dst[d]) begin
        if (!cands[k].is_dst || int'(cands[k].id) != d) failures++;
        k++;
      end
    end
    tot_spills += int'(n_spills);
    tot_extra_flips += int'(n_flips) - int'(n_matched);
    tot_failed += int'(n_failed);
  endtask

  initial begin
    graph_c g;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 24; t++) begin
      g = new(8 + $urandom_range(NV - 8), 8 + $urandom_range(NV - 8));
      g.randomize_edges(2 + $urandom_range(10));
      run_one(g);
    end
    checks += 3;
    if (tot_spills == 0)      begin failures++; $display("no matching FIFO spill"); end
    if (tot_extra_flips == 0) begin failures++; $display("no multi-step augmenting path"); end
    if (tot_failed == 0)      begin failures++; $display("no failed search"); end
    $display("spills %0d, extra flips %0d, failed searches %0d", tot_spills, tot_extra_flips, tot_failed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
