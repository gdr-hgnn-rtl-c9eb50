// tb_match_fifo_table: a 4-set, 2-way table. Random keys are inserted with
// random values; a model of every set (ways in use, round-robin victim)
// predicts each spill; afterwards every inserted key is looked up and popped,
// and must be found in the table or have been spilled, never both.
module tb_match_fifo_table;
  import gdr_pkg::*;
  localparam int SETS = 4, WAYS = 2;
  logic clk = 0, rst_n = 0, clr = 0, ins_en = 0, pop_en = 0;
  vid_t ins_key = '0, ins_val = '0, lk_key = '0;
  logic spill_valid, lk_hit;
  vid_t spill_key, spill_val, lk_val;
  int checks = 0, failures = 0, spills = 0;
  int val_of [int];
  bit spilled [int];

  match_fifo_table #(.SETS(SETS), .WAYS(WAYS)) dut (.*);
  always #5 clk = ~clk;

  function automatic int hash(int k);
    int h = 0;
    for (int b = 0; b < 16; b += 2) h ^= (k >> b) & 3;
    return h;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int occ [SETS];
    int keys [$];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      val_of.delete(); spilled.delete(); keys.delete();
      foreach (occ[s]) occ[s] = 0;
      for (int i = 0; i < 12; i++) begin
        int k;
        do k = $urandom_range(200); while (val_of.exists(k));
        @(negedge clk);
        ins_en = 1; ins_key = vid_t'(k); ins_val = vid_t'($urandom_range(65000));
        val_of[k] = int'(ins_val);
        keys.push_back(k);
        #1;
        checks++;
        if (spill_valid !== (occ[hash(k)] == WAYS)) begin
          failures++; $display("spill flag %0b, set %0d held %0d", spill_valid, hash(k), occ[hash(k)]);
        end
        if (spill_valid) begin
          spills++;
          checks++;
          if (!val_of.exists(int'(spill_key)) || spilled.exists(int'(spill_key)) ||
              hash(int'(spill_key)) != hash(k) || val_of[int'(spill_key)] != int'(spill_val)) begin
            failures++; $display("bad spill key %0d val %0d", spill_key, spill_val);
          end
          spilled[int'(spill_key)] = 1;
        end else occ[hash(k)]++;
      end
      @(negedge clk); ins_en = 0;
      foreach (keys[i]) begin
        @(negedge clk);
        lk_key = vid_t'(keys[i]); pop_en = 1;
        #1;
        checks++;
        if (lk_hit === spilled.exists(keys[i])) begin
          failures++; $display("key %0d hit %0b spilled %0b", keys[i], lk_hit, spilled.exists(keys[i]));
        end else if (lk_hit && int'(lk_val) != val_of[keys[i]]) begin
          failures++; $display("key %0d value %0d exp %0d", keys[i], lk_val, val_of[keys[i]]);
        end
      end
      // popped entries are gone
      foreach (keys[i]) begin
        @(negedge clk);
        lk_key = vid_t'(keys[i]); pop_en = 0;
        #1;
        checks++;
        if (lk_hit) begin failures++; $display("key %0d still present after pop", keys[i]); end
      end
    end
    checks++;
    if (spills == 0) begin failures++; $display("no spill exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
