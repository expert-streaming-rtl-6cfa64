// expert_streaming_top: a multi-chiplet MoE expert-streaming system.
//
// One IO-die scheduler (moe_scheduler) and NUM_CHIPLETS compute dies, each
// represented by its micro-slice flow controller (msflow_ctrl), joined by the
// die-to-die network (nop_xbar). For every MoE layer the scheduler orders the
// experts and sends each to the chiplets of its trajectory; the controllers
// then stream the expert's micro-slices around that ring, fetching their
// share from DDR and computing each micro-slice once on every chiplet.
//
// Brought out as ports, because they are outside this RTL: one DDR fetch
// port per chiplet (request with target slot, then a landing strobe), and
// one PE-array port per chiplet (start strobe with the slot to compute,
// done strobe back). Chiplet c has chiplet id c.
//
// Interface timing: see moe_scheduler for the layer handshake and
// msflow_ctrl for the DDR and PE ports. The per-chiplet ev_* outputs are
// one-clock event strobes for statistics.
module expert_streaming_top
  import fse_pkg::*;
#(
  parameter int unsigned NUM_EXPERTS  = 128,
  parameter int unsigned NUM_CHIPLETS = 4,
  parameter int unsigned CNT_W        = 11,
  parameter int unsigned NUM_REQ      = 16,
  parameter int unsigned NUM_MS       = 8,
  parameter int unsigned NUM_SLOTS    = 5,
  parameter int unsigned NUM_CTX      = 4,
  parameter int unsigned QWIN         = 8,
  localparam int unsigned AW = (NUM_EXPERTS > 1) ? $clog2(NUM_EXPERTS) : 1,
  localparam int unsigned SW = (NUM_SLOTS > 1) ? $clog2(NUM_SLOTS) : 1,
  localparam int unsigned FW = $clog2(NUM_SLOTS + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [CNT_W-1:0]        theta_min,
  input  logic [7:0]              n_threshold,
  input  logic                    layer_start,
  output logic                    layer_done,
  output logic                    sched_busy,
  input  logic                    gate_valid,
  output logic                    gate_ready,
  input  logic [AW-1:0]           gate_id,
  input  logic [CNT_W-1:0]        gate_count,
  input  logic [NUM_CHIPLETS-1:0] gate_traj,
  input  logic                    fwd_pass,
  input  logic [NUM_REQ-1:0]      req_active,
  input  logic [NUM_EXPERTS-1:0]  req_experts [NUM_REQ],
  output logic [NUM_REQ-1:0]      defer,
  // DDR fetch ports
  output logic [NUM_CHIPLETS-1:0] ddr_req_valid,
  output eid_t                    ddr_req_expert [NUM_CHIPLETS],
  output msi_t                    ddr_req_ms     [NUM_CHIPLETS],
  output logic [SW-1:0]           ddr_req_slot   [NUM_CHIPLETS],
  input  logic [NUM_CHIPLETS-1:0] ddr_req_ready,
  input  logic [NUM_CHIPLETS-1:0] ddr_rsp_valid,
  input  logic [SW-1:0]           ddr_rsp_slot   [NUM_CHIPLETS],
  // PE-array ports
  output logic [NUM_CHIPLETS-1:0] pe_start,
  output eid_t                    pe_expert [NUM_CHIPLETS],
  output msi_t                    pe_ms     [NUM_CHIPLETS],
  output logic [SW-1:0]           pe_slot   [NUM_CHIPLETS],
  input  logic [NUM_CHIPLETS-1:0] pe_done,
  // status
  output logic [NUM_CHIPLETS-1:0] idle,
  output logic [NUM_CHIPLETS-1:0] dispatch_cstar,
  output logic                    ev_dispatch,
  output logic                    ev_preload,
  output logic                    ev_wait,
  output logic [15:0]             sched_latency,
  output logic [NUM_CHIPLETS-1:0] ev_rule1,
  output logic [NUM_CHIPLETS-1:0] ev_rule2,
  output logic [NUM_CHIPLETS-1:0] ev_rule3,
  output logic [NUM_CHIPLETS-1:0] ev_rule4,
  output logic [NUM_CHIPLETS-1:0] ev_tx_stall,
  output logic [NUM_CHIPLETS-1:0] chip_busy
);

  logic [NUM_CHIPLETS-1:0] task_valid, chip_done, chip_ctx_free, chip_slot_room;
  task_t                   task_pkt;
  logic [FW-1:0]           free_slots [NUM_CHIPLETS];
  eid_t                    done_expert [NUM_CHIPLETS];

  logic [NUM_CHIPLETS-1:0] tx_valid, tx_ready, rx_valid, rx_ready;
  cid_t                    tx_dst [NUM_CHIPLETS];
  mshdr_t                  tx_hdr [NUM_CHIPLETS];
  mshdr_t                  rx_hdr [NUM_CHIPLETS];
  logic [AW:0]             queue_len;

  moe_scheduler #(
    .NUM_EXPERTS(NUM_EXPERTS), .NUM_CHIPLETS(NUM_CHIPLETS), .CNT_W(CNT_W),
    .NUM_REQ(NUM_REQ), .QWIN(QWIN)
  ) u_sched (
    .clk, .rst_n, .theta_min, .n_threshold,
    .layer_start, .layer_done, .busy(sched_busy),
    .gate_valid, .gate_ready, .gate_id, .gate_count, .gate_traj,
    .fwd_pass, .req_active, .req_experts, .defer,
    .task_valid, .task_pkt, .chip_busy, .chip_done, .chip_ctx_free, .chip_slot_room,
    .idle, .dispatch_cstar, .ev_dispatch, .ev_preload, .ev_wait, .queue_len, .sched_latency
  );

  for (genvar c = 0; c < NUM_CHIPLETS; c++) begin : g_chip
    // room for a pre-load: a held expert fetches only with four free slots
    assign chip_slot_room[c] = free_slots[c] >= FW'(4);

    msflow_ctrl #(
      .NUM_CHIPLETS(NUM_CHIPLETS), .NUM_MS(NUM_MS), .NUM_SLOTS(NUM_SLOTS), .NUM_CTX(NUM_CTX)
    ) u_flow (
      .clk, .rst_n, .self_id(cid_t'(c)),
      .task_valid(task_valid[c]), .task_pkt,
      .ctx_free(chip_ctx_free[c]), .busy(chip_busy[c]),
      .done_valid(chip_done[c]), .done_expert(done_expert[c]),
      .free_slots(free_slots[c]), .peer_free(free_slots),
      .rx_valid(rx_valid[c]), .rx_hdr(rx_hdr[c]), .rx_ready(rx_ready[c]),
      .tx_valid(tx_valid[c]), .tx_dst(tx_dst[c]), .tx_hdr(tx_hdr[c]), .tx_ready(tx_ready[c]),
      .ddr_req_valid(ddr_req_valid[c]), .ddr_req_expert(ddr_req_expert[c]),
      .ddr_req_ms(ddr_req_ms[c]), .ddr_req_slot(ddr_req_slot[c]),
      .ddr_req_ready(ddr_req_ready[c]), .ddr_rsp_valid(ddr_rsp_valid[c]), .ddr_rsp_slot(ddr_rsp_slot[c]),
      .pe_start(pe_start[c]), .pe_expert(pe_expert[c]), .pe_ms(pe_ms[c]), .pe_slot(pe_slot[c]),
      .pe_done(pe_done[c]),
      .ev_rule1(ev_rule1[c]), .ev_rule2(ev_rule2[c]), .ev_rule3(ev_rule3[c]), .ev_rule4(ev_rule4[c]),
      .ev_tx_stall(ev_tx_stall[c])
    );
  end

  nop_xbar #(.NUM_CHIPLETS(NUM_CHIPLETS)) u_nop (
    .clk, .rst_n, .tx_valid, .tx_dst, .tx_hdr, .tx_ready, .rx_valid, .rx_hdr, .rx_ready
  );

  // done_expert and queue_len are status of the parts, not needed at this level
  logic unused_ok;
  always_comb begin
    unused_ok = ^queue_len;
    for (int unsigned c = 0; c < NUM_CHIPLETS; c++) unused_ok = unused_ok ^ (^done_expert[c]);
  end

endmodule
