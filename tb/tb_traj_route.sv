// tb_traj_route: every trajectory mask and chiplet id of a 4x4 array against
// a reference ring walk (ascending ids, wrapping).
module tb_traj_route;
  import fse_pkg::*;
  localparam int unsigned N = 16;
  int checks = 0, failures = 0;
  cid_t self_id, next_hop, rank;
  logic [N-1:0] traj;
  logic [CID_W:0] len;
  traj_route #(.NUM_CHIPLETS(N)) dut (.*);
  initial begin
    for (int i = 0; i < 3000; i++) begin
      int exp_next, exp_rank, exp_len;
      traj = (i < 16) ? N'(1 << i) : N'($urandom);
      self_id = cid_t'($urandom % N);
      #1;
      exp_len = $countones(traj); exp_rank = 0; exp_next = -1;
      for (int c = 0; c < N; c++) if (traj[c] && c < self_id) exp_rank++;
      for (int k = 1; k <= N && exp_next < 0; k++) if (traj[(self_id + k) % N]) exp_next = (self_id + k) % N;
      if (exp_next < 0) exp_next = self_id;
      checks++;
      if (next_hop != exp_next || rank != exp_rank || len != exp_len) begin
        failures++;
        $display("FAIL traj=%b self=%0d: next %0d/%0d rank %0d/%0d len %0d/%0d", traj, self_id, next_hop, exp_next, rank, exp_rank, len, exp_len);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
