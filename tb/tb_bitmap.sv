// tb_bitmap: random set, clear and test operations on a 64-bit bitmap,
// compared against a plain bit array kept by the testbench.
module tb_bitmap;
  localparam int N = 64;
  logic clk = 0, rst_n = 0, clr = 0, set_en = 0;
  logic [5:0] set_idx = '0, test_idx = '0;
  logic test_bit;
  logic [N-1:0] bits;
  bit model [N];
  int checks = 0, failures = 0;

  bitmap #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (model[i]) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      // check the previous cycle's effect
      test_idx = 6'($urandom_range(N-1));
      #1;
      checks++;
      if (test_bit !== model[test_idx]) begin
        failures++;
        $display("mismatch idx %0d dut %0b model %0b", test_idx, test_bit, model[test_idx]);
      end
      for (int i = 0; i < N; i++) if (bits[i] !== model[i]) begin failures++; checks++; end
      clr    = ($urandom_range(49) == 0);
      set_en = $urandom_range(1);
      set_idx = 6'($urandom_range(N-1));
      if (clr) foreach (model[i]) model[i] = 0;
      else if (set_en) model[set_idx] = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
