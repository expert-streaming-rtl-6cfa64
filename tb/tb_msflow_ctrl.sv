// tb_msflow_ctrl: one micro-slice flow controller (chiplet 1 of 4) in a
// behavioural environment. The testbench plays the rest of every ring: for
// each expert it runs on a trajectory of 1, 2 or 3 chiplets, it sends the
// controller the micro-slices the other members own, with the visit count
// they would carry on arrival, and it takes whatever the controller sends on.
// Some experts are first opened as held pre-loads and started later.
// Checks, per expert: only the controller's own share (ms mod T == rank) is
// fetched from DDR, each once; every micro-slice is computed exactly once;
// own slices leave for the next hop with T-1 visits, received slices with
// visits > 1 are forwarded with one visit less; done_valid pulses once, after
// the last computation; the PE array never gets two jobs at once; all slots
// are free at the end and Rules 1-4 and a transmit stall all occurred.
module tb_msflow_ctrl;
  import fse_pkg::*;
  localparam int unsigned N = 4, MS = 8, SL = 5, CX = 4, SW = 3, FW = 3;
  localparam int unsigned SELF = 1, NEXP = 48;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic task_valid = 0, ctx_free, busy, done_valid;
  task_t task_pkt = '0;
  eid_t done_expert;
  logic [FW-1:0] free_slots;
  logic [FW-1:0] peer_free [N];
  logic rx_valid = 0, rx_ready, tx_valid, tx_ready = 0;
  mshdr_t rx_hdr = '0, tx_hdr;
  cid_t tx_dst;
  logic ddr_req_valid, ddr_req_ready, ddr_rsp_valid;
  eid_t ddr_req_expert;
  msi_t ddr_req_ms;
  logic [SW-1:0] ddr_req_slot, ddr_rsp_slot;
  logic pe_start, pe_done;
  eid_t pe_expert;
  msi_t pe_ms;
  logic [SW-1:0] pe_slot;
  logic ev_rule1, ev_rule2, ev_rule3, ev_rule4, ev_tx_stall;

  msflow_ctrl #(.NUM_CHIPLETS(N), .NUM_MS(MS), .NUM_SLOTS(SL), .NUM_CTX(CX)) dut (
    .clk, .rst_n, .self_id(cid_t'(SELF)), .task_valid, .task_pkt, .ctx_free, .busy,
    .done_valid, .done_expert, .free_slots, .peer_free, .rx_valid, .rx_hdr, .rx_ready,
    .tx_valid, .tx_dst, .tx_hdr, .tx_ready, .ddr_req_valid, .ddr_req_expert, .ddr_req_ms,
    .ddr_req_slot, .ddr_req_ready, .ddr_rsp_valid, .ddr_rsp_slot, .pe_start, .pe_expert,
    .pe_ms, .pe_slot, .pe_done, .ev_rule1, .ev_rule2, .ev_rule3, .ev_rule4, .ev_tx_stall);

  // trajectories containing chiplet 1: rank of 1, ring length, next hop
  localparam logic [3:0] TRAJ [6] = '{4'b0010, 4'b0011, 4'b1010, 4'b0110, 4'b0111, 4'b1011};
  int e_traj [NEXP], e_len [NEXP], e_rank [NEXP], e_next [NEXP];
  int loads [NEXP][MS], comps [NEXP][MS], sent [NEXP][MS], dones [NEXP];
  bit running [NEXP];
  int n_r1 = 0, n_r2 = 0, n_r3 = 0, n_r4 = 0, n_stall = 0;
  mshdr_t rxq [$];

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  // ---- DDR model: one request at a time, random latency ----
  int ddr_timer = 0;
  logic [SW-1:0] ddr_slot_q;
  assign ddr_req_ready = (ddr_timer == 0);
  always @(posedge clk) begin
    ddr_rsp_valid <= 1'b0;
    if (!rst_n) ddr_timer <= 0;
    else if (ddr_req_valid && ddr_req_ready) begin
      int e; e = int'(ddr_req_expert);
      ddr_timer  <= 3 + $urandom % 8;
      ddr_slot_q <= ddr_req_slot;
      if (e < NEXP) begin
        loads[e][ddr_req_ms]++;
        check(int'(ddr_req_ms) % e_len[e] == e_rank[e], $sformatf("fetch of foreign slice e%0d ms%0d", e, ddr_req_ms));
      end else check(0, "fetch of unknown expert");
    end else if (ddr_timer == 1) begin
      ddr_timer     <= 0;
      ddr_rsp_valid <= 1'b1;
      ddr_rsp_slot  <= ddr_slot_q;
    end else if (ddr_timer > 1) ddr_timer <= ddr_timer - 1;
  end

  // ---- PE model ----
  int pe_timer = 0;
  always @(posedge clk) begin
    pe_done <= 1'b0;
    if (!rst_n) pe_timer <= 0;
    else if (pe_start) begin
      check(pe_timer == 0, "PE started while busy");
      pe_timer <= 1 + $urandom % 6;
      if (int'(pe_expert) < NEXP) begin
        comps[pe_expert][pe_ms]++;
        check(running[pe_expert], $sformatf("held expert %0d computed", pe_expert));
      end
    end else if (pe_timer == 1) begin
      pe_timer <= 0;
      pe_done  <= 1'b1;
    end else if (pe_timer > 1) pe_timer <= pe_timer - 1;
  end

  // ---- network: take what the controller sends, stall at random ----
  always @(posedge clk) if (rst_n) begin
    if (tx_valid && tx_ready) begin
      int e, m, own, d;
      e = int'(tx_hdr.expert); m = int'(tx_hdr.ms);
      own = m % e_len[e];
      d = (e_rank[e] - own + e_len[e]) % e_len[e];
      sent[e][m]++;
      check(int'(tx_dst) == e_next[e], $sformatf("e%0d ms%0d sent to %0d", e, m, tx_dst));
      check(int'(tx_hdr.visits) == e_len[e] - d - 1, $sformatf("e%0d ms%0d visits %0d", e, m, tx_hdr.visits));
    end
    if (done_valid) begin
      int e; e = int'(done_expert);
      dones[e]++;
      for (int m = 0; m < MS; m++)
        check(comps[e][m] == 1, $sformatf("e%0d done with ms%0d computed %0d times", e, m, comps[e][m]));
    end
    n_r1 += int'(ev_rule1); n_r2 += int'(ev_rule2); n_r3 += int'(ev_rule3);
    n_r4 += int'(ev_rule4); n_stall += int'(ev_tx_stall);
  end

  // ---- the rest of the rings: deliver foreign slices ----
  always @(negedge clk) if (rst_n) begin
    if (rx_valid && rx_ready) begin rx_valid = 0; end  // consumed at the last edge
    tx_ready = ($urandom % 4 != 0);
    for (int c = 0; c < N; c++) peer_free[c] = ($urandom % 8 == 0) ? FW'(1) : FW'(SL);
    if (!rx_valid && rxq.size() > 0 && ($urandom % 2 == 0)) begin
      int k; k = $urandom % rxq.size();
      rx_hdr = rxq[k]; rxq.delete(k); rx_valid = 1;
    end
  end

  task automatic open_expert(int e, bit pre);
    @(negedge clk);
    while (!ctx_free) @(negedge clk);
    task_pkt = '{preload: pre, expert: eid_t'(e), traj: cmask_t'(TRAJ[e % 6])};
    task_valid = 1; @(negedge clk); task_valid = 0;
  endtask

  task automatic run_expert(int e);
    // the run task (for a held expert its second task) and the foreign slices
    @(negedge clk);
    task_pkt = '{preload: 1'b0, expert: eid_t'(e), traj: cmask_t'(TRAJ[e % 6])};
    task_valid = 1; running[e] = 1; @(negedge clk); task_valid = 0;
    for (int m = 0; m < MS; m++) begin
      int own, d;
      own = m % e_len[e];
      d = (e_rank[e] - own + e_len[e]) % e_len[e];
      if (d != 0) rxq.push_back('{expert: eid_t'(e), ms: msi_t'(m), visits: vis_t'(e_len[e] - d)});
    end
  endtask

  initial begin
    for (int e = 0; e < NEXP; e++) begin
      logic [3:0] t; t = TRAJ[e % 6];
      e_traj[e] = int'(t); e_len[e] = $countones(t);
      e_rank[e] = $countones(t & 4'b0001);
      e_next[e] = SELF;
      for (int k = 1; k <= N; k++) if (t[(SELF + k) % N]) begin e_next[e] = (SELF + k) % N; break; end
      dones[e] = 0; running[e] = 0;
      for (int m = 0; m < MS; m++) begin loads[e][m] = 0; comps[e][m] = 0; sent[e][m] = 0; end
    end
    foreach (peer_free[c]) peer_free[c] = FW'(SL);
    repeat (3) @(negedge clk); rst_n = 1;
    for (int e = 0; e < NEXP; e++) begin
      if (e % 5 == 2) begin
        // held pre-load, started a while later
        open_expert(e, 1);
        repeat ($urandom % 60) @(negedge clk);
        check(comps[e][0] == 0 && comps[e][1] == 0, $sformatf("held e%0d computed early", e));
        run_expert(e);
      end else begin
        while (!ctx_free) @(negedge clk);
        run_expert(e);
      end
      repeat ($urandom % 20) @(negedge clk);
    end
    fork
      wait (!busy && rxq.size() == 0 && !rx_valid && dones.sum() == NEXP);
      begin repeat (20000) @(negedge clk); end
    join_any
    disable fork;
    repeat (5) @(negedge clk);
    for (int e = 0; e < NEXP; e++) begin
      check(dones[e] == 1, $sformatf("e%0d done %0d times", e, dones[e]));
      for (int m = 0; m < MS; m++) begin
        int own, d;
        own = m % e_len[e];
        d = (e_rank[e] - own + e_len[e]) % e_len[e];
        check(comps[e][m] == 1, $sformatf("e%0d ms%0d computed %0d times", e, m, comps[e][m]));
        check(loads[e][m] == (d == 0 ? 1 : 0), $sformatf("e%0d ms%0d fetched %0d times", e, m, loads[e][m]));
        check(sent[e][m] == (e_len[e] - d - 1 > 0 ? 1 : 0), $sformatf("e%0d ms%0d sent %0d times", e, m, sent[e][m]));
      end
    end
    check(free_slots == FW'(SL) && ctx_free && !busy, "all slots and contexts free at the end");
    check(n_r1 > 0 && n_r2 > 0 && n_r3 > 0 && n_r4 > 0 && n_stall > 0, "rules 1-4 and a stall seen");
    $display("rule1 %0d rule2 %0d rule3 %0d rule4 %0d stalls %0d", n_r1, n_r2, n_r3, n_r4, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
