// tb_buffer_ram: fills a 100-word buffer with random words, rewrites some of
// them, and reads every word back on both read ports against a model.
module tb_buffer_ram;
  localparam int WORDS = 100, W = 16;
  logic clk = 0, we = 0;
  logic [6:0] waddr = '0, raddr_a = '0, raddr_b = '0;
  logic [W-1:0] wdata = '0, rdata_a, rdata_b;
  logic [W-1:0] model [WORDS];
  int checks = 0, failures = 0;

  buffer_ram #(.WORDS(WORDS), .WIDTH(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, logic [W-1:0] d);
    @(negedge clk);
    we = 1; waddr = 7'(a); wdata = d;
    model[a] = d;
    @(negedge clk);
    we = 0;
  endtask

  initial begin
    for (int a = 0; a < WORDS; a++) wr(a, W'($urandom));
    for (int k = 0; k < 300; k++) wr($urandom_range(WORDS-1), W'($urandom));
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk);
      raddr_a = 7'(a);
      raddr_b = 7'(WORDS - 1 - a);
      #1;
      checks += 2;
      if (rdata_a !== model[a]) begin failures++; $display("A %0d: %h exp %h", a, rdata_a, model[a]); end
      if (rdata_b !== model[WORDS-1-a]) begin failures++; $display("B %0d", WORDS-1-a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
