// tb_sched_router: random task sends, busy waveforms and done pulses. Checks
// the one-clock delivery of the packet to exactly the masked chiplets, the
// release mask on each falling edge of busy, and the outstanding count
// (non-preload starts minus reported completions).
module tb_sched_router;
  import fse_pkg::*;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic send = 0;
  task_t send_pkt = '0, task_pkt;
  logic [N-1:0] send_mask = '0, task_valid, busy = '0, done_valid = '0, release_mask;
  logic [15:0] outstanding;
  sched_router #(.NUM_CHIPLETS(N)) dut (.*);
  int exp_out = 0, n_rel = 0;
  logic [N-1:0] busy_prev = '0;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    bit p_send; task_t p_pkt; logic [N-1:0] p_mask;
    repeat (2) @(negedge clk); rst_n = 1;
    p_send = 0; p_pkt = '0; p_mask = '0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      // results of the previous edge
      checks++;
      if (task_valid != (p_send ? p_mask : '0) || (p_send && task_pkt != p_pkt)) begin
        failures++; $display("FAIL %0d: task_valid %b want %b", i, task_valid, p_send ? p_mask : '0);
      end
      checks++;
      if (outstanding != 16'(exp_out)) begin failures++; $display("FAIL %0d: outstanding %0d want %0d", i, outstanding, exp_out); end
      // new stimulus
      busy_prev = busy;
      send = ($urandom % 3 == 0);
      send_pkt = '{preload: ($urandom % 4 == 0), expert: eid_t'($urandom), traj: cmask_t'($urandom % 16)};
      send_mask = N'($urandom);
      busy = N'($urandom);
      done_valid = (exp_out > 4) ? N'($urandom) : '0;
      #0;
      checks++;
      if (release_mask != (busy_prev & ~busy)) begin failures++; $display("FAIL %0d: release %b", i, release_mask); end
      n_rel += $countones(release_mask);
      if (send && !send_pkt.preload) exp_out += $countones(send_mask);
      exp_out -= $countones(done_valid);
      p_send = send; p_pkt = send_pkt; p_mask = send_mask;
    end
    checks++; if (n_rel == 0) begin failures++; $display("FAIL no release"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
