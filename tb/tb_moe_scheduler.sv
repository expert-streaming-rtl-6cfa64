// tb_moe_scheduler: the scheduler at its default size (128 experts, 4
// chiplets, 16 requests) against a behavioural model of the compute dies.
// Each layer has random token counts and trajectories and random request
// activations. After pairing, the queue is read back and compared with the
// method: hot experts (count >= theta_min) paired from the two ends of the
// descending order, then the cold experts needed by requests that were not
// deferred, nothing else. During dispatch: every queued expert is sent once,
// to exactly its trajectory, within the matcher window; c* is idle when it is
// chosen; pre-loads go to one chiplet of a still-waiting expert; layer_done
// comes only after every chiplet has reported its part finished; the first
// expert leaves within 800 clocks of layer_start.
module tb_moe_scheduler;
  import fse_pkg::*;
  localparam int unsigned E = 128, N = 4, R = 16, CW = 11, AW = 7, CX = 4, QW = 8;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [CW-1:0] theta_min = 11'd6;
  logic [7:0] n_threshold = 8'd1;
  logic layer_start = 0, layer_done, busy;
  logic gate_valid = 0, gate_ready;
  logic [AW-1:0] gate_id = '0;
  logic [CW-1:0] gate_count = '0;
  logic [N-1:0] gate_traj = '0;
  logic fwd_pass = 0;
  logic [R-1:0] req_active = '0, defer;
  logic [E-1:0] req_experts [R];
  logic [N-1:0] task_valid, chip_busy, chip_done, chip_ctx_free, chip_slot_room;
  task_t task_pkt;
  logic [N-1:0] idle, dispatch_cstar;
  logic ev_dispatch, ev_preload, ev_wait;
  logic [AW:0] queue_len;
  logic [15:0] sched_latency;

  moe_scheduler dut (.*);

  initial begin #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  // ---- compute-die model: each open expert runs for a random time ----
  int   ch_exp  [N][$];
  int   ch_left [N][$];   // -1: held (pre-loaded, not started)
  always_comb for (int c = 0; c < N; c++) begin
    chip_busy[c] = 1'b0;
    foreach (ch_left[c][k]) if (ch_left[c][k] >= 0) chip_busy[c] = 1'b1;
    chip_ctx_free[c] = ch_exp[c].size() < CX;
  end
  always @(posedge clk) begin
    if (!rst_n) begin
      chip_done <= '0;
      for (int c = 0; c < N; c++) begin ch_exp[c].delete(); ch_left[c].delete(); end
    end else begin
      logic [N-1:0] dn; dn = '0;
      for (int c = 0; c < N; c++) begin
        // finish at most one expert per clock
        for (int k = 0; k < ch_exp[c].size(); k++)
          if (ch_left[c][k] == 0 && !dn[c]) begin
            dn[c] = 1; ch_exp[c].delete(k); ch_left[c].delete(k); break;
          end
        foreach (ch_left[c][k]) if (ch_left[c][k] > 0) ch_left[c][k]--;
        if (task_valid[c]) begin
          int f[$]; f = ch_exp[c].find_first_index(x) with (x == int'(task_pkt.expert));
          if (task_pkt.preload) begin
            check(f.size() == 0, "pre-load of an expert already open");
            ch_exp[c].push_back(int'(task_pkt.expert)); ch_left[c].push_back(-1);
          end else if (f.size() > 0) begin
            check(ch_left[c][f[0]] == -1, "run of an expert already running");
            ch_left[c][f[0]] = 5 + $urandom % 60;
          end else begin
            check(ch_exp[c].size() < CX, "task to a chiplet without a free context");
            ch_exp[c].push_back(int'(task_pkt.expert)); ch_left[c].push_back(5 + $urandom % 60);
          end
        end
      end
      chip_done <= dn;
    end
  end
  always @(negedge clk) chip_slot_room = N'($urandom) | N'($urandom);

  // ---- dispatch monitor ----
  int cnt [E]; logic [N-1:0] trj [E];
  int qref [$], qdut [$];
  int sent [E], pos_of [E], pre_of [E];
  bit in_disp = 0;
  int n_disp = 0, n_pre = 0, n_wait = 0, n_defer = 0, n_done_rep = 0;
  always @(posedge clk) if (rst_n && in_disp) begin
    n_done_rep += $countones(chip_done);
    if (ev_dispatch) begin
      int e, p, firstp;
      e = int'(task_pkt.expert);
      n_disp++;
    end
    n_wait += int'(ev_wait);
  end
  // task packets appear one clock after the decision
  always @(posedge clk) if (rst_n && in_disp && task_valid != '0) begin
    int e; e = int'(task_pkt.expert);
    if (!task_pkt.preload) begin
      int firstp;
      sent[e]++;
      check(task_valid == trj[e], $sformatf("expert %0d sent to %b, trajectory %b", e, task_valid, trj[e]));
      check(N'(task_pkt.traj) == trj[e], "packet trajectory");
      firstp = qdut.size();
      for (int i = 0; i < qdut.size(); i++) if (sent[qdut[i]] == 0 || qdut[i] == e && sent[e] == 1) begin firstp = i; break; end
      check(pos_of[e] >= 0 && pos_of[e] < firstp + QW, $sformatf("expert %0d sent from outside the window", e));
    end else begin
      n_pre++;
      check($countones(task_valid) == 1 && (task_valid & trj[e]) != 0 && sent[e] == 0 && pre_of[e] == 0,
            $sformatf("pre-load of %0d to %b", e, task_valid));
      pre_of[e]++;
    end
  end
  always @(posedge clk) if (rst_n && ev_dispatch) check((dispatch_cstar & idle) == dispatch_cstar && $countones(dispatch_cstar) == 1, "c* idle");

  initial begin
    foreach (req_experts[r]) req_experts[r] = '0;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int layer = 0; layer < 5; layer++) begin
      int perm [E]; int hot [$], cold [$], t0;
      logic [E-1:0] keep, coldv;
      theta_min = CW'(3 + $urandom % 6);
      n_threshold = 8'(1 + $urandom % 2);
      for (int e = 0; e < E; e++) begin
        cnt[e] = ($urandom % 4 == 0) ? 0 : $urandom % 40;
        if ($urandom % 3 == 0 && cnt[e] > 0) cnt[e] = $urandom % 4;
        trj[e] = N'($urandom); if (trj[e] == 0) trj[e] = N'(1) << ($urandom % N);
        perm[e] = e; sent[e] = 0; pos_of[e] = -1; pre_of[e] = 0;
      end
      perm.shuffle();
      req_active = R'($urandom);
      for (int r = 0; r < R; r++) begin
        req_experts[r] = '0;
        repeat (8) req_experts[r][$urandom % E] = 1'b1;
      end
      // a few forward passes earn QoS credit
      repeat ($urandom % 3) begin fwd_pass = 1; @(negedge clk); fwd_pass = 0; @(negedge clk); end
      layer_start = 1; @(negedge clk); layer_start = 0;
      t0 = 0;
      for (int k = 0; k < E; k++) begin
        gate_valid = 1; gate_id = AW'(perm[k]); gate_count = CW'(cnt[perm[k]]); gate_traj = trj[perm[k]];
        @(posedge clk); #0;
        while (!gate_ready) begin @(posedge clk); #0; end
        @(negedge clk);
      end
      gate_valid = 0;
      // wait for the queue, then read it back
      wait (dut.state == dut.S_DISP);
      @(negedge clk);
      qdut.delete();
      for (int i = 0; i < int'(queue_len); i++) begin qdut.push_back(int'(dut.q_id[i])); pos_of[dut.q_id[i]] = i; end
      coldv = '0; keep = '0;
      for (int e = 0; e < E; e++) coldv[e] = cnt[e] > 0 && cnt[e] < int'(theta_min);
      for (int r = 0; r < R; r++) if (req_active[r] && !defer[r]) keep |= req_experts[r];
      keep &= coldv;
      n_defer += $countones(defer);
      // reference queue, as keys (ties make ids order-free)
      hot.delete(); cold.delete();
      for (int e = 0; e < E; e++) if (cnt[e] >= int'(theta_min)) hot.push_back(cnt[e]); else if (keep[e]) cold.push_back(cnt[e]);
      hot.rsort(); cold.rsort();
      qref.delete();
      for (int i = 0, j = hot.size() - 1; i <= j; i++, j--) begin
        qref.push_back(hot[i]); if (j != i) qref.push_back(hot[j]);
      end
      foreach (cold[i]) qref.push_back(cold[i]);
      check(qdut.size() == qref.size(), $sformatf("layer %0d queue length %0d want %0d", layer, qdut.size(), qref.size()));
      for (int i = 0; i < qdut.size() && i < qref.size(); i++)
        check(cnt[qdut[i]] == qref[i], $sformatf("layer %0d queue[%0d] key %0d want %0d", layer, i, cnt[qdut[i]], qref[i]));
      for (int i = 0; i < qdut.size(); i++)
        check(cnt[qdut[i]] >= int'(theta_min) || keep[qdut[i]], $sformatf("expert %0d queued but not needed", qdut[i]));
      in_disp = 1;
      wait (layer_done);
      @(negedge clk); in_disp = 0;
      for (int e = 0; e < E; e++)
        check(sent[e] == (pos_of[e] >= 0 ? 1 : 0), $sformatf("layer %0d expert %0d sent %0d times", layer, e, sent[e]));
      for (int c = 0; c < N; c++) check(ch_exp[c].size() == 0, "chiplet still has an open expert at layer_done");
      check(idle == '1, "all chiplets idle after the layer");
      check(sched_latency < 800, $sformatf("first dispatch after %0d clocks", sched_latency));
      $display("layer %0d: queue %0d (hot %0d cold %0d), latency %0d", layer, qdut.size(), hot.size(), cold.size(), sched_latency);
      repeat (5) @(negedge clk);
    end
    check(n_pre > 0 && n_wait > 0 && n_defer > 0, $sformatf("coverage: pre-loads %0d waits %0d deferrals %0d", n_pre, n_wait, n_defer));
    $display("dispatches %0d pre-loads %0d wait clocks %0d deferrals %0d", n_disp, n_pre, n_wait, n_defer);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
