// tb_eit_reloader: streams several layers of (id, count, trajectory) entries
// in a shuffled order with random valid gaps, and checks the EIT writes, the
// sorter load positions (0..E-1 in arrival order), the cold vector
// (0 < count < theta_min) and the single done pulse after the last entry.
module tb_eit_reloader;
  localparam int unsigned E = 32, N = 4, CW = 11, AW = 5;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, in_valid = 0, in_ready, done;
  logic [CW-1:0] theta_min = 11'd4;
  logic [AW-1:0] in_id = '0;
  logic [CW-1:0] in_count = '0;
  logic [N-1:0] in_traj = '0;
  logic eit_we, srt_load;
  logic [AW-1:0] eit_waddr, srt_idx, srt_id;
  logic [CW-1:0] eit_wcount, srt_key;
  logic [N-1:0] eit_wtraj;
  logic [E-1:0] expert_cold;
  eit_reloader #(.NUM_EXPERTS(E), .NUM_CHIPLETS(N), .CNT_W(CW)) dut (.*);
  int n_load, n_done;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (rst_n) begin
    if (srt_load) begin
      checks++;
      if (!eit_we || eit_waddr != in_id || eit_wcount != in_count || eit_wtraj != in_traj ||
          srt_idx != AW'(n_load) || srt_id != in_id || srt_key != in_count) begin
        failures++; $display("FAIL load %0d: idx %0d id %0d key %0d", n_load, srt_idx, srt_id, srt_key);
      end
      n_load++;
    end
    if (done) n_done++;
  end
  initial begin
    int perm [E]; logic [CW-1:0] cnt [E]; logic [E-1:0] cold;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    checks++; if (in_ready) begin failures++; $display("FAIL ready before start"); end
    for (int layer = 0; layer < 6; layer++) begin
      theta_min = CW'(1 + $urandom % 8);
      for (int e = 0; e < E; e++) begin perm[e] = e; cnt[e] = CW'($urandom % 12); end
      perm.shuffle();
      cold = '0;
      for (int e = 0; e < E; e++) cold[e] = cnt[e] != 0 && cnt[e] < theta_min;
      n_load = 0; n_done = 0;
      start = 1; @(negedge clk); start = 0;
      for (int k = 0; k < E; k++) begin
        while ($urandom % 3 == 0) @(negedge clk);
        in_valid = 1; in_id = AW'(perm[k]); in_count = cnt[perm[k]]; in_traj = N'($urandom);
        @(posedge clk); #0;
        if (!in_ready) begin failures++; $display("FAIL not ready at %0d", k); end
        @(negedge clk); in_valid = 0;
      end
      @(negedge clk);
      checks++;
      if (n_load != E || n_done != 1 || expert_cold != cold || in_ready) begin
        failures++; $display("FAIL layer %0d: loads %0d done %0d cold %h/%h", layer, n_load, n_done, expert_cold, cold);
      end
      // extra entries after the layer are not taken
      in_valid = 1; @(negedge clk); in_valid = 0;
      checks++; if (n_load != E) begin failures++; $display("FAIL entry taken after done"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
