// tb_sync_fifo: random pushes and pops on an 8-deep FIFO, compared against a
// queue kept by the testbench; checks data order, empty, full and count, and
// that push and pop in one cycle on a full FIFO keeps it full.
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0, clr = 0, push = 0, pop = 0;
  logic [W-1:0] din = '0, dout;
  logic empty, full;
  logic [3:0] count;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0, full_seen = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      checks++;
      if (empty !== (q.size() == 0) || full !== (q.size() == D) || count !== 4'(q.size())) begin
        failures++;
        $display("flags: empty %0b full %0b count %0d model %0d", empty, full, count, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if (dout !== q[0]) begin failures++; $display("data %h exp %h", dout, q[0]); end
      end
      if (full) full_seen++;
      // bias towards filling in the first half, draining in the second
      push = (q.size() < D || $urandom_range(1)) && ($urandom_range(9) < ((it / 500) % 2 ? 4 : 7));
      pop  = (q.size() > 0) && ($urandom_range(9) < ((it / 500) % 2 ? 7 : 4));
      if (q.size() == D && !pop) push = 0;
      clr  = ($urandom_range(999) == 0);
      din  = W'($urandom);
      if (clr) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(din);
      end
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("FIFO never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
