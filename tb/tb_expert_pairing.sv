// tb_expert_pairing: feeds sorted lists with hot, cold and unused experts and
// compares the queue written by the pairing unit with a reference built here:
// hot experts from both ends inwards, then kept cold experts in list order.
// Includes the Fig. 5 example counts (16,10,9,8,7,7,6,6,5,5,4,4,4,4,3,3 hot,
// then 2,2,2,2,1,1,1,1 cold) with threshold 3.
module tb_expert_pairing;
  localparam int unsigned E = 32, CW = 11, AW = 5;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0;
  logic [CW-1:0] theta_min = 11'd3;
  logic [CW-1:0] sorted_key [E];
  logic [AW-1:0] sorted_id [E];
  logic [E-1:0] cold_keep = '0;
  logic q_we, busy, done;
  logic [AW-1:0] q_idx, q_id;
  logic [AW:0] q_len;
  int got [$];
  expert_pairing #(.NUM_EXPERTS(E), .CNT_W(CW)) dut (.*);
  always @(posedge clk) if (rst_n && q_we) begin
    if (q_idx != AW'(got.size())) begin failures++; $display("FAIL q_idx %0d size %0d t=%0t", q_idx, got.size(), $time); end
    got.push_back(q_id);
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int fig5 [24] = '{16,10,9,8,7,7,6,6,5,5,4,4,4,4,3,3,2,2,2,2,1,1,1,1};
    @(negedge clk); rst_n = 1;
    for (int round = 0; round < 30; round++) begin
      int exp_q [$];
      int h, k;
      exp_q.delete();
      // descending keys
      k = 60;
      for (int i = 0; i < E; i++) begin
        if (round == 0) sorted_key[i] = (i < 24) ? CW'(fig5[i]) : '0;
        else begin
          if ($urandom % 3 == 0 && k > 0) k = k - 1 - int'($urandom % 5);
          if (k < 0) k = 0;
          sorted_key[i] = CW'(k);
        end
        sorted_id[i] = AW'((i * 7 + round) % E);
      end
      theta_min = (round == 0) ? 11'd3 : CW'(1 + $urandom % 50);
      cold_keep = E'($urandom);
      h = 0;
      for (int i = 0; i < E; i++) if (sorted_key[i] != 0 && sorted_key[i] >= theta_min) h++;
      for (int i = 0; i < (h + 1) / 2; i++) begin
        exp_q.push_back(sorted_id[i]);
        if (h - 1 - i > i) exp_q.push_back(sorted_id[h - 1 - i]);
      end
      for (int i = h; i < E; i++) if (sorted_key[i] != 0 && cold_keep[sorted_id[i]]) exp_q.push_back(sorted_id[i]);
      got.delete();
      start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (got.size() != exp_q.size() || q_len != (AW+1)'(exp_q.size())) begin
        failures++; $display("FAIL round %0d: %0d entries, q_len %0d, expected %0d", round, got.size(), q_len, exp_q.size());
      end else
        for (int i = 0; i < exp_q.size(); i++) begin
          checks++;
          if (got[i] != exp_q[i]) begin failures++; $display("FAIL round %0d entry %0d: %0d vs %0d", round, i, got[i], exp_q[i]); end
        end
      if (round == 0) begin
        // first pairs of Fig. 5: 16 with the last 3, 10 with the other 3
        checks++;
        if (got.size() < 4 || got[0] != sorted_id[0] || got[1] != sorted_id[15] || got[2] != sorted_id[1] || got[3] != sorted_id[14]) begin
          failures++; $display("FAIL Fig. 5 pairs");
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
