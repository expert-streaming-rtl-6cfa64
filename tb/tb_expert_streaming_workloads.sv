// tb_expert_streaming_workloads: the evaluated MoE workloads on the full-size
// system (top at its default parameters, no overrides).
//
// For each model size (16 experts top-2, 32 top-2, 64 with 2 shared + 6
// routed, 128 top-8) and each load (16, 64, 256 and 1024 tokens per
// iteration) one MoE layer is generated and run. Tokens belong to 16
// requests; request r lives on chiplet r mod 4. Each token picks its experts
// from a long-tailed distribution (a cubic skew over a fixed shuffle of the
// expert ids), which gives a few hot experts and many cold ones. Token counts,
// trajectories (the chiplets holding tokens of an expert) and the request
// activation masks follow from that. The hot threshold is a quarter of the
// mean count per expert (at least 2).
//
// Checked per layer, against a reference from the generated tokens: which
// experts run; each micro-slice of a running expert fetched once from DDR and
// computed once on every chiplet of its trajectory and nowhere else; the layer
// ends with all chiplets idle; the first expert leaves within 800 clocks.
// Then token buffering: the 128-expert model at 64 tokens for twelve
// iterations at each slack level (10, 20 and 30 %, i.e. one deferral credit
// every 10, 5 and 3 forward passes), with the deferred requests checked
// against a model of the QoS timers.
// Printed per layer: clocks and PE-array utilisation under the simple DDR and
// PE timing models here (PE time = 2 + tokens on the chiplet), which
// illustrate the flow but are not calibrated to the silicon.
module tb_expert_streaming_workloads;
  import fse_pkg::*;

  localparam int unsigned E   = 128;
  localparam int unsigned N   = 4;
  localparam int unsigned R   = 16;
  localparam int unsigned MS  = 8;
  localparam int unsigned SL  = 5;
  localparam int unsigned CX  = 4;
  localparam int unsigned AW  = $clog2(E);
  localparam int unsigned SW  = $clog2(SL);
  localparam int unsigned THETA = 3;
  localparam int unsigned DDR_LAT = 9;
  localparam int unsigned NLAYERS = 2;

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

  // no parameter list: the design's defaults, which the constants above match
  expert_streaming_top dut (.*);

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

  // ---- PE model: time grows with the chiplet's tokens for the expert ----
  int pe_timer [N];
  int computed [N][E][MS];
  always_ff @(posedge clk) begin
    for (int c = 0; c < N; c++) begin
      pe_done[c] <= 1'b0;
      if (!rst_n) pe_timer[c] <= 0;
      else if (pe_start[c]) begin
        pe_timer[c] <= 2 + tok[c][pe_expert[c]];
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
    #40000000;
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

  int perm_id [E];
  int unsigned theta_w = THETA;

  // one layer of a model with ne experts, k per token (ns of them shared)
  task automatic make_workload(input int ne, input int k, input int ns, input int ntok);
    for (int e = 0; e < E; e++) begin
      cnt[e] = 0; traj[e] = '0;
      for (int c = 0; c < N; c++) tok[c][e] = 0;
    end
    for (int r = 0; r < R; r++) req_experts[r] = '0;
    for (int i = 0; i < ne; i++) perm_id[i] = i;
    for (int i = ne - 1; i > 0; i--) begin
      int j, t; j = int'(rnd(i + 1)); t = perm_id[i]; perm_id[i] = perm_id[j]; perm_id[j] = t;
    end
    for (int t = 0; t < ntok; t++) begin
      int r, c; logic [E-1:0] pick;
      r = t % R; c = r % N; pick = '0;
      for (int s = 0; s < ns; s++) pick[s] = 1'b1;
      for (int n = ns; n < k; n++) begin
        int e;
        do begin
          int unsigned u; u = rnd(1000);
          e = perm_id[ns + int'((64'(ne - ns) * u * u * u) / 64'd1000000000)];
        end while (pick[e]);
        pick[e] = 1'b1;
      end
      for (int e = 0; e < ne; e++) if (pick[e]) begin
        cnt[e]++; tok[c][e]++; traj[e][c] = 1'b1; req_experts[r][e] = 1'b1;
      end
    end
    theta_w = (ntok * k) / (ne * 4);
    if (theta_w < 2) theta_w = 2;
  endtask

  int pe_busy_clk = 0;
  always @(posedge clk) for (int c = 0; c < N; c++) if (pe_timer[c] != 0) pe_busy_clk++;

  task automatic run_layer(input int layer, input logic [R-1:0] exp_defer);
    bit runs [E];
    int t0, t1, b0, nrun;
    foreach (ddr_loads[e, m]) ddr_loads[e][m] = 0;
    foreach (computed[c, e, m]) computed[c][e][m] = 0;
    // reference: which experts run
    for (int e = 0; e < E; e++) begin
      bit cold = (cnt[e] != 0) && (cnt[e] < theta_w);
      bit kept = 0;
      for (int r = 0; r < R; r++) if (req_active[r] && !exp_defer[r] && req_experts[r][e]) kept = 1;
      runs[e] = (cnt[e] != 0) && (!cold || kept);
      if (cold && kept)  n_kept++;
      if (cold && !kept) n_skipped++;
    end
    n_defer += $countones(exp_defer);
    theta_min = 11'(theta_w);
    @(negedge clk); layer_start = 1; @(negedge clk); layer_start = 0;
    t0 = cycle; b0 = pe_busy_clk;
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
    nrun = 0;
    for (int e = 0; e < E; e++) nrun += int'(runs[e]);
    $display("  %0d experts run, theta %0d: %0d clocks, first dispatch after %0d, PE utilisation %0d%%",
             nrun, theta_w, t1 - t0, sched_latency, (100 * (pe_busy_clk - b0)) / (N * (t1 - t0)));
  endtask

  initial begin
    int layer;
    for (int c = 0; c < N; c++) begin ddr_timer[c] = 0; pe_timer[c] = 0; ddr_rsp_slot[c] = '0; end
    ddr_rsp_valid = '0; pe_done = '0;
    for (int r = 0; r < R; r++) req_experts[r] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    req_active = '1;
    layer = 0;
    for (int m = 0; m < 4; m++) begin
      int ne, k, ns; string name;
      case (m)
        0: begin ne = 16;  k = 2; ns = 0; name = "Phi-3.5-MoE (16 experts, top-2)"; end
        1: begin ne = 32;  k = 2; ns = 0; name = "Yuan2.0-M32 (32 experts, top-2)"; end
        2: begin ne = 64;  k = 8; ns = 2; name = "DeepSeek-MoE (64 experts, 2 shared + 6)"; end
        default: begin ne = 128; k = 8; ns = 0; name = "Qwen3-30B-A3B (128 experts, top-8)"; end
      endcase
      for (int ti = 0; ti < 4; ti++) begin
        int ntok; ntok = 16 << (2 * ti);
        layer++;
        $display("%s, %0d tokens per iteration", name, ntok);
        make_workload(ne, k, ns, ntok);
        run_layer(layer, '0);
      end
    end
    // token buffering at the three slack levels: a request may be deferred
    // once every n_threshold forward passes (10 % slack = once in 10)
    begin
      int tq [R], cf [R];
      for (int r = 0; r < R; r++) begin tq[r] = 0; cf[r] = 0; end
      for (int sl = 0; sl < 3; sl++) begin
        int nth, ndef; logic [R-1:0] ed;
        nth = (sl == 0) ? 10 : (sl == 1) ? 5 : 3;
        n_threshold = 8'(nth);
        ndef = 0;
        $display("Qwen3-30B-A3B, 64 tokens per iteration, %0d %% slack (n_threshold %0d)", 10 * (sl + 1), nth);
        for (int it = 0; it < 12; it++) begin
          layer++;
          make_workload(128, 8, 0, 64);
          ed = '0;
          for (int r = 0; r < R; r++) begin
            bit hit; hit = 0;
            if (cf[r] >= nth) begin tq[r]++; cf[r] = 0; end
            for (int e = 0; e < E; e++) if (req_experts[r][e] && cnt[e] != 0 && cnt[e] < int'(theta_w)) hit = 1;
            if (hit && tq[r] > 0) begin ed[r] = 1; tq[r]--; end
          end
          ndef += $countones(ed);
          run_layer(layer, ed);
          // end of the iteration
          @(negedge clk); fwd_pass = 1; @(negedge clk); fwd_pass = 0;
          for (int r = 0; r < R; r++) if (!ed[r]) cf[r]++;
        end
        $display("  %0d request-layers deferred in 12 iterations", ndef);
        check(ndef > 0, $sformatf("deferrals at %0d %% slack", 10 * (sl + 1)));
      end
    end
    $display("dispatch=%0d preload=%0d wait=%0d release=%0d rule1=%0d rule2=%0d rule3=%0d rule4=%0d stall=%0d",
             n_dispatch, n_preload, n_wait, n_release, n_r1, n_r2, n_r3, n_r4, n_stall);
    check(n_dispatch > 0 && n_release > 0, "experts dispatched and chiplets released");
    check(n_r1 > 0 && n_r2 > 0 && n_r3 > 0 && n_r4 > 0, "Rules 1-4 all applied");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
