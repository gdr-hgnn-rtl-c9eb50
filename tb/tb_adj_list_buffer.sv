// tb_adj_list_buffer: loads the out-neighbour lists of a random 24x24
// bipartite graph in CSR form and reads every row back, checking the row
// bounds and each neighbour against the graph's edge list.
module tb_adj_list_buffer;
  import gdr_pkg::*;
  import tb_graph_pkg::*;
  localparam int NV = 32, WORDS = 600;
  localparam int VW = $clog2(NV), EW = $clog2(WORDS + 1);
  logic clk = 0, off_we = 0, nbr_we = 0;
  logic [VW:0] off_addr = '0;
  logic [EW-1:0] off_data = '0, nbr_waddr = '0, row_begin, row_end, nbr_addr = '0;
  vid_t nbr_wdata = '0, nbr_data;
  logic [VW-1:0] row_idx = '0;
  int checks = 0, failures = 0;
  graph_c g;

  adj_list_buffer #(.NV(NV), .WORDS(WORDS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    g = new(24, 24);
    g.randomize_edges(30);
    g.build_csr();
    for (int s = 0; s <= g.ns; s++) begin
      @(negedge clk); off_we = 1; off_addr = (VW+1)'(s); off_data = EW'(g.soff[s]);
    end
    @(negedge clk); off_we = 0;
    for (int i = 0; i < g.snbr.size(); i++) begin
      @(negedge clk); nbr_we = 1; nbr_waddr = EW'(i); nbr_wdata = vid_t'(g.snbr[i]);
    end
    @(negedge clk); nbr_we = 0;
    for (int s = 0; s < g.ns; s++) begin
      int cnt;
      @(negedge clk);
      row_idx = VW'(s);
      #1;
      checks++;
      if (int'(row_end) - int'(row_begin) < 0) begin failures++; end
      cnt = 0;
      for (int e = 0; e < g.ne; e++) if (g.es[e] == s) cnt++;
      if (int'(row_end - row_begin) != cnt) begin
        failures++; $display("row %0d degree %0d exp %0d", s, row_end - row_begin, cnt);
      end
      for (logic [EW-1:0] p = row_begin; p < row_end; p++) begin
        nbr_addr = p;
        #1;
        checks++;
        if (!g.has_edge(s, int'(nbr_data))) begin failures++; $display("bad nbr %0d of %0d", nbr_data, s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
