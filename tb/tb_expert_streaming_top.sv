// tb_expert_streaming_top: end-to-end test of the expert-streaming system.
//
// Runs five MoE layers through the scheduler and the chiplet array, with
// behavioural DDR and PE-array models on the top's ports. The gate results
// are pseudo-random (some hot, some cold, some unused experts; random
// trajectories). Requests 0 and 1 earn one QoS credit before layer 1, so in
// layer 1 they are deferred if they touch a cold expert, and cold experts
// touched only by them are skipped; a credit not
// spent in layer 1 is spent in layer 2.
//
// Checked against a reference worked out here from the gate data alone:
// the deferred requests; which experts run; that every micro-slice of a
// running expert is fetched from DDR exactly once and computed exactly once
// on every chiplet of its trajectory and nowhere else; that the layer ends;
// that the first expert is sent within 800 clocks (sub-microsecond at
// 800 MHz). Each mechanism (dispatch, pre-load, waiting for an idle chiplet,
// chiplet release, deferral, kept cold expert, Rules 1-4, link stall) must
// happen at least once over the run.
module tb_expert_streaming_top;
  import fse_pkg::*;

  localparam int unsigned E   = 16;
  localparam int unsigned N   = 4;
  localparam int unsigned R   = 4;
  localparam int unsigned MS  = 4;
  localparam int unsigned SL  = 5;
  localparam int unsigned CX  = 4;
  localparam int unsigned AW  = $clog2(E);
  localparam int unsigned SW  = $clog2(SL);
  localparam int unsigned THETA = 3;
  localparam int unsigned DDR_LAT = 9;
  localparam int unsigned NLAYERS = 5;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [10:0] theta_min = 11'(THETA);
  logic [7:0]  n_threshold = 8'd1;
  logic layer_start = 0, layer_done, sched_busy;
  logic gate_valid = 0, gate_ready;
  logic [AW-1:0] gate_id = '0;
  logic [10:0] gate_count = '0;
  logic [N-1:0] gate_traj = '0;
  logic fwd_pass = 0;
  logic [R-1:0] req_active = '0;
  logic [E-1:0] req_experts [R];
  logic [R-1:0] defer;
  logic [N-1:0] ddr_req_valid, ddr_req_ready, ddr_rsp_valid;
  eid_t ddr_req_expert [N];
  msi_t ddr_req_ms [N];
  logic [SW-1:0] ddr_req_slot [N], ddr_rsp_slot [N];
  logic [N-1:0] pe_start, pe_done;
  eid_t pe_expert [N];
  msi_t pe_ms [N];
  logic [SW-1:0] pe_slot [N];
  logic [N-1:0] idle, dispatch_cstar, ev_rule1, ev_rule2, ev_rule3, ev_rule4, ev_tx_stall, chip_busy;
  logic ev_dispatch, ev_preload, ev_wait;
  logic [15:0] sched_latency;

  expert_streaming_top #(
    .NUM_EXPERTS(E), .NUM_CHIPLETS(N), .NUM_REQ(R), .NUM_MS(MS), .NUM_SLOTS(SL), .NUM_CTX(CX)
  ) dut (.*);

  // ---- layer data ----
  int unsigned cnt  [E];
  logic [N-1:0] traj [E];
  int unsigned tok  [N][E];   // per-chiplet tokens, sets PE time

  // ---- DDR model: one request at a time per chiplet, fixed latency ----
  int ddr_timer [N];
  logic [SW-1:0] ddr_slot_q [N];
  int ddr_loads [E][MS];
  always_comb for (int c = 0; c < N; c++) ddr_req_ready[c] = (ddr_timer[c] == 0);
  always_ff @(posedge clk) begin
    for (int c = 0; c < N; c++) begin
      ddr_rsp_valid[c] <= 1'b0;
      if (!rst_n) ddr_timer[c] <= 0;
      else if (ddr_req_valid[c] && ddr_req_ready[c]) begin
        ddr_timer[c]  <= DDR_LAT + c;
        ddr_slot_q[c] <= ddr_req_slot[c];
        ddr_loads[ddr_req_expert[c]][ddr_req_ms[c]]++;
      end else if (ddr_timer[c] == 1) begin
        ddr_timer[c]     <= 0;
        ddr_rsp_valid[c] <= 1'b1;
        ddr_rsp_slot[c]  <= ddr_slot_q[c];
      end else if (ddr_timer[c] > 1) ddr_timer[c] <= ddr_timer[c] - 1;
    end
  end

  // ---- PE model: time grows with the chiplet's tokens for the expert;
  //      chiplet 0 is six times slower, so slices queue up behind it ----
  int pe_timer [N];
  int computed [N][E][MS];
  always_ff @(posedge clk) begin
    for (int c = 0; c < N; c++) begin
      pe_done[c] <= 1'b0;
      if (!rst_n) pe_timer[c] <= 0;
      else if (pe_start[c]) begin
        pe_timer[c] <= 2 + tok[c][pe_expert[c]] * (c == 0 ? 6 : 1);
        computed[c][pe_expert[c]][pe_ms[c]]++;
      end else if (pe_timer[c] == 1) begin
        pe_timer[c] <= 0;
        pe_done[c]  <= 1'b1;
      end else if (pe_timer[c] > 1) pe_timer[c] <= pe_timer[c] - 1;
    end
  end

  // ---- event counters ----
  int n_defer = 0, n_kept = 0, n_skipped = 0;
  int n_dispatch, n_preload, n_wait, n_release, n_r1, n_r2, n_r3, n_r4, n_stall;
  logic [N-1:0] idle_q;
  always_ff @(posedge clk) begin
    idle_q <= idle;
    if (rst_n) begin
      n_dispatch += int'(ev_dispatch);
      n_preload  += int'(ev_preload);
      n_wait     += int'(ev_wait);
      n_release  += $countones(idle & ~idle_q);
      n_r1 += $countones(ev_rule1);
      n_r2 += $countones(ev_rule2);
      n_r3 += $countones(ev_rule3);
      n_r4 += $countones(ev_rule4);
      n_stall += $countones(ev_tx_stall);
    end
  end

  int cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int seed = 7;
  int tq_ref [R];
  function automatic int unsigned rnd(input int unsigned m);
    seed = seed * 1103515245 + 12345;
    return ((seed >>> 8) & 32'h7fffff) % m;
  endfunction

  task automatic make_layer();
    for (int e = 0; e < E; e++) begin
      int unsigned k = rnd(10);
      if (k < 2)      cnt[e] = 0;
      else if (k < 5) cnt[e] = 1 + rnd(THETA - 1);         // cold
      else            cnt[e] = THETA + rnd(20);             // hot
      traj[e] = '0;
      for (int c = 0; c < N; c++) tok[c][e] = 0;
      if (cnt[e] != 0) begin
        while (traj[e] == '0) traj[e] = N'(rnd(1 << N));
        if ($countones(traj[e]) > cnt[e]) traj[e] = N'(1) << rnd(N);
        for (int c = 0; c < N; c++) if (traj[e][c]) tok[c][e] = 1 + rnd(cnt[e]);
      end
    end
  endtask

  task automatic run_layer(input int layer, input logic [R-1:0] exp_defer);
    bit runs [E];
    int t0, t1;
    foreach (ddr_loads[e, m]) ddr_loads[e][m] = 0;
    foreach (computed[c, e, m]) computed[c][e][m] = 0;
    // reference: which experts run
    for (int e = 0; e < E; e++) begin
      bit cold = (cnt[e] != 0) && (cnt[e] < THETA);
      bit kept = 0;
      for (int r = 0; r < R; r++) if (req_active[r] && !exp_defer[r] && req_experts[r][e]) kept = 1;
      runs[e] = (cnt[e] != 0) && (!cold || kept);
      if (cold && kept)  n_kept++;
      if (cold && !kept) n_skipped++;
    end
    n_defer += $countones(exp_defer);
    @(negedge clk); layer_start = 1; @(negedge clk); layer_start = 0;
    t0 = cycle;
    for (int e = 0; e < E; e++) begin
      gate_valid = 1; gate_id = AW'(e); gate_count = 11'(cnt[e]); gate_traj = traj[e];
      @(posedge clk); while (!gate_ready) @(posedge clk);
      @(negedge clk);
    end
    gate_valid = 0;
    wait (layer_done);
    t1 = cycle;
    @(negedge clk);
    check(defer == exp_defer, $sformatf("layer %0d defer %b expected %b", layer, defer, exp_defer));
    check(sched_latency < 800, $sformatf("layer %0d first dispatch after %0d clocks", layer, sched_latency));
    for (int e = 0; e < E; e++)
      for (int m = 0; m < MS; m++) begin
        check(ddr_loads[e][m] == (runs[e] ? 1 : 0),
              $sformatf("layer %0d expert %0d ms %0d loaded %0d times", layer, e, m, ddr_loads[e][m]));
        for (int c = 0; c < N; c++)
          check(computed[c][e][m] == ((runs[e] && traj[e][c]) ? 1 : 0),
                $sformatf("layer %0d chiplet %0d expert %0d ms %0d computed %0d times", layer, c, e, m, computed[c][e][m]));
      end
    check(idle == '1, "all chiplets idle at the end of the layer");
    $display("layer %0d: %0d clocks, first dispatch after %0d", layer, t1 - t0, sched_latency);
  endtask

  initial begin
    for (int r = 0; r < R; r++)
      for (int e = 0; e < E; e++) req_experts[r][e] = (e % R == r) || (e % 7 == r);
    for (int c = 0; c < N; c++) begin ddr_timer[c] = 0; pe_timer[c] = 0; ddr_rsp_slot[c] = '0; end
    ddr_rsp_valid = '0; pe_done = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // one forward pass in which only requests 0 and 1 take part
    req_active = 4'b0011;
    fwd_pass = 1; @(negedge clk); fwd_pass = 0;
    req_active = 4'b1111;
    // reference QoS timers: requests 0 and 1 hold one credit each, spent
    // at the first layer where they touch a cold expert
    for (int r = 0; r < R; r++) tq_ref[r] = (r < 2) ? 1 : 0;
    for (int layer = 1; layer <= NLAYERS; layer++) begin
      logic [R-1:0] ed;
      make_layer();
      ed = '0;
      for (int r = 0; r < R; r++)
        for (int e = 0; e < E; e++)
          if (tq_ref[r] > 0 && req_experts[r][e] && cnt[e] != 0 && cnt[e] < THETA) ed[r] = 1;
      for (int r = 0; r < R; r++) if (ed[r]) tq_ref[r]--;
      run_layer(layer, ed);
    end
    $display("dispatch=%0d preload=%0d wait=%0d release=%0d rule1=%0d rule2=%0d rule3=%0d rule4=%0d stall=%0d",
             n_dispatch, n_preload, n_wait, n_release, n_r1, n_r2, n_r3, n_r4, n_stall);
    $display("deferred requests=%0d cold experts kept=%0d skipped=%0d", n_defer, n_kept, n_skipped);
    check(n_defer > 0, "a request was deferred (token buffering)");
    check(n_kept > 0, "a cold expert ran for a request without slack");
    check(n_skipped > 0, "a cold expert was skipped");
    check(n_dispatch > 0, "dispatch happened");
    check(n_preload > 0, "Rule-4 pre-load happened");
    check(n_wait > 0, "scheduler waited for an idle chiplet");
    check(n_release > 0, "chiplet released to the idle set");
    check(n_r1 > 0, "Rule 1 (received slice computed) happened");
    check(n_r2 > 0, "Rule 2 (local slice computed) happened");
    check(n_r3 > 0, "Rule 3 (release at end of trajectory) happened");
    check(n_r4 > 0, "Rule 4 (DDR fetch) happened");
    check(n_stall > 0, "link back-pressure happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
