// tb_graph_generator: random graphs with random vertex classes. Every edge
// must be emitted exactly once, tagged with the subgraph its two end classes
// define, the tags must arrive in pass order (Src_out->Dst_in, Src_in->Dst_in,
// Src_in->Dst_out, uncovered), and the per-subgraph counters must agree. The
// accelerator side drops e_ready at random, which must hold the stream.
module tb_graph_generator;
  import gdr_pkg::*;
  import tb_graph_pkg::*;
  localparam int NV = 64, ADJ_W = 4096;
  localparam int VW = $clog2(NV), EW = $clog2(ADJ_W + 1);

  logic clk = 0, rst_n = 0, start = 0;
  logic [VW:0] nsrc = '0;
  logic busy, done;
  logic [NV-1:0] src_in = '0, dst_in = '0;
  logic off_we = 0, nbr_we = 0;
  logic [VW:0] off_addr = '0;
  logic [EW-1:0] off_data = '0, nbr_waddr = '0;
  vid_t nbr_wdata = '0;
  logic [VW-1:0] row_idx;
  logic [EW-1:0] row_begin, row_end, nbr_addr;
  vid_t nbr_data;
  logic e_valid, e_ready;
  vid_t e_src, e_dst;
  subgraph_e e_sg;
  logic [31:0] sg_count [4];

  int checks = 0, failures = 0, held = 0;
  int got_s [$], got_d [$], got_g [$];

  adj_list_buffer #(.NV(NV), .WORDS(ADJ_W)) u_adj (.*);
  graph_generator #(.NV(NV), .ADJ_W(ADJ_W)) dut (.*);

  always #5 clk = ~clk;

  always @(negedge clk) begin
    e_ready = ($urandom_range(3) != 0);
    #1;
    if (rst_n && e_valid) begin
      if (e_ready) begin
        got_s.push_back(int'(e_src)); got_d.push_back(int'(e_dst)); got_g.push_back(int'(e_sg));
      end else held++;
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one(graph_c g);
    int cnt [4];
    g.build_csr();
    for (int s = 0; s <= g.ns; s++) begin
      @(negedge clk); off_we = 1; off_addr = (VW+1)'(s); off_data = EW'(g.soff[s]);
    end
    @(negedge clk); off_we = 0;
    for (int i = 0; i < g.ne; i++) begin
      @(negedge clk); nbr_we = 1; nbr_waddr = EW'(i); nbr_wdata = vid_t'(g.snbr[i]);
    end
    @(negedge clk); nbr_we = 0;
    src_in = {$urandom, $urandom};
    dst_in = {$urandom, $urandom};
    got_s.delete(); got_d.delete(); got_g.delete();
    @(negedge clk); nsrc = (VW+1)'(g.ns); start = 1;
    @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    checks++;
    if (got_s.size() != g.ne) begin failures++; $display("%0d edges, expected %0d", got_s.size(), g.ne); end
    foreach (cnt[p]) cnt[p] = 0;
    for (int i = 0; i < got_s.size(); i++) begin
      int exp_g;
      case ({src_in[got_s[i]], dst_in[got_d[i]]})
        2'b01: exp_g = 0;
        2'b11: exp_g = 1;
        2'b10: exp_g = 2;
        default: exp_g = 3;
      endcase
      checks++;
      if (!g.has_edge(got_s[i], got_d[i]) || got_g[i] != exp_g || (i > 0 && got_g[i] < got_g[i-1])) begin
        failures++; $display("edge %0d->%0d tag %0d exp %0d", got_s[i], got_d[i], got_g[i], exp_g);
      end
      for (int j = 0; j < i; j++) if (got_s[j] == got_s[i] && got_d[j] == got_d[i]) failures++;
      cnt[got_g[i]]++;
    end
    for (int p = 0; p < 4; p++) begin
      checks++;
      if (int'(sg_count[p]) != cnt[p]) begin failures++; $display("count %0d: %0d vs %0d", p, sg_count[p], cnt[p]); end
    end
  endtask

  initial begin
    graph_c g;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      g = new(4 + $urandom_range(NV - 4), 4 + $urandom_range(NV - 4));
      g.randomize_edges(3 + $urandom_range(10));
      run_one(g);
    end
    checks++;
    if (held == 0) begin failures++; $display("back-pressure never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
