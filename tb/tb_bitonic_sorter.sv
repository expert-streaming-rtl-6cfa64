// tb_bitonic_sorter: loads 128 random (count, id) pairs, sorts them and
// checks that the result is descending, is a permutation of the input (every
// id once, with its own count) and took log2(E)(log2(E)+1)/2 = 28 clocks.
module tb_bitonic_sorter;
  localparam int unsigned E = 128, CW = 11, AW = 7;
  localparam int unsigned STAGES = AW * (AW + 1) / 2;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic load = 0, start = 0, busy, done;
  logic [AW-1:0] load_idx = '0, load_id = '0;
  logic [CW-1:0] load_key = '0;
  logic [CW-1:0] sorted_key [E];
  logic [AW-1:0] sorted_id [E];
  logic [CW-1:0] key_of [E];
  bitonic_sorter #(.NUM_EXPERTS(E), .CNT_W(CW)) dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    @(negedge clk); rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      int n, seen [E];
      // round 0: the example counts of the table figure then random; round 3: many ties
      for (int e = 0; e < E; e++) begin
        key_of[e] = (round == 3) ? CW'($urandom % 4) : CW'($urandom % 1025);
        if (round == 0 && e < 3) key_of[e] = (e == 0) ? 28 : (e == 1) ? 32 : 16;
      end
      for (int e = 0; e < E; e++) begin
        load = 1; load_idx = AW'(e); load_id = AW'((e * 37) % E); load_key = key_of[(e * 37) % E];
        @(negedge clk);
      end
      load = 0;
      start = 1; @(negedge clk); start = 0;
      n = 1;
      while (!done) begin @(negedge clk); n++; end
      checks++; if (n != STAGES + 1) begin failures++; $display("FAIL sort took %0d clocks", n - 1); end
      foreach (seen[i]) seen[i] = 0;
      for (int i = 0; i < E; i++) begin
        seen[sorted_id[i]]++;
        checks++;
        if (sorted_key[i] != key_of[sorted_id[i]]) begin failures++; $display("FAIL key/id mismatch at %0d", i); end
        if (i > 0) begin
          checks++;
          if (sorted_key[i] > sorted_key[i-1]) begin failures++; $display("FAIL order at %0d: %0d > %0d", i, sorted_key[i], sorted_key[i-1]); end
        end
      end
      foreach (seen[i]) begin checks++; if (seen[i] != 1) begin failures++; $display("FAIL id %0d seen %0d", i, seen[i]); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
