// moe_scheduler: expert-trajectory scheduler of the IO die.
//
// Runs once per MoE layer, after gating. The steps, in order:
//   LOAD      the reloader writes the layer's gate results (token count and
//             trajectory of every expert) into the Expert Information Table
//             and into the sorter, and marks the cold experts;
//   SORT      the bitonic sorter orders the experts by token count; in the
//             same cycles token buffering decides which requests are
//             deferred at this layer (Algorithm 2 of the method);
//   PAIR      the pairing unit writes the scheduling queue: hot experts
//             paired from the two ends of the sorted list, then the cold
//             experts some non-deferred request still needs; the trajectory
//             of each entry is looked up in the table as it is written;
//   DISPATCH  the matcher takes the first queued expert whose trajectory
//             contains an idle chiplet, the router sends it to all chiplets
//             of its trajectory and the Idle Chiplet Vector drops them. When
//             nothing can start while chiplets are idle, the first waiting
//             expert is pre-loaded on one of its chiplets (Rule 4).
//             Chiplets come back to the idle set when they have no running
//             expert left. The layer ends when every queued expert has been
//             sent and has finished on every chiplet of its trajectory.
// Steps other than DISPATCH take about E + log2(E)^2/2 + E clocks; with 128
// experts the first expert is sent within about 300 clocks of layer_start.
//
// Interface: layer_start strobe; gate results as a valid/ready stream of
// exactly NUM_EXPERTS entries; request activation masks (req_active,
// req_experts) stable from layer_start to layer_done; fwd_pass strobe at the
// end of each iteration. Chiplet side: task strobes, and per chiplet busy,
// done strobe, free-context and buffer-room flags. layer_done strobes at the
// end; defer holds the deferred requests of the layer.
//
// From the method: the table, sorter, pairing, token buffering, idle vector,
// matcher and their sequence. The one-action-per-HOLDOFF clocks dispatch
// rate (it lets chiplet status catch up with sent tasks), the queue window
// and the status signals are this design's own.
module moe_scheduler
  import fse_pkg::*;
#(
  parameter int unsigned NUM_EXPERTS  = 128,
  parameter int unsigned NUM_CHIPLETS = 4,
  parameter int unsigned CNT_W        = 11,
  parameter int unsigned NUM_REQ      = 16,
  parameter int unsigned QWIN         = 8,
  parameter int unsigned HOLDOFF      = 3,
  localparam int unsigned AW = (NUM_EXPERTS > 1) ? $clog2(NUM_EXPERTS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // configuration
  input  logic [CNT_W-1:0]        theta_min,
  input  logic [7:0]              n_threshold,
  // layer control
  input  logic                    layer_start,
  output logic                    layer_done,
  output logic                    busy,
  // gate results
  input  logic                    gate_valid,
  output logic                    gate_ready,
  input  logic [AW-1:0]           gate_id,
  input  logic [CNT_W-1:0]        gate_count,
  input  logic [NUM_CHIPLETS-1:0] gate_traj,
  // requests
  input  logic                    fwd_pass,
  input  logic [NUM_REQ-1:0]      req_active,
  input  logic [NUM_EXPERTS-1:0]  req_experts [NUM_REQ],
  output logic [NUM_REQ-1:0]      defer,
  // chiplets
  output logic [NUM_CHIPLETS-1:0] task_valid,
  output task_t                   task_pkt,
  input  logic [NUM_CHIPLETS-1:0] chip_busy,
  input  logic [NUM_CHIPLETS-1:0] chip_done,
  input  logic [NUM_CHIPLETS-1:0] chip_ctx_free,
  input  logic [NUM_CHIPLETS-1:0] chip_slot_room,
  // status
  output logic [NUM_CHIPLETS-1:0] idle,
  output logic [NUM_CHIPLETS-1:0] dispatch_cstar,
  output logic                    ev_dispatch,
  output logic                    ev_preload,
  output logic                    ev_wait,
  output logic [AW:0]             queue_len,
  output logic [15:0]             sched_latency
);

  localparam int unsigned PW = (QWIN > 1) ? $clog2(QWIN) : 1;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_SORT, S_PAIR, S_DISP} state_t;
  state_t state;

  // ---- reloader -> EIT / sorter ----
  logic                    rl_start, rl_done;
  logic                    eit_we;
  logic [AW-1:0]           eit_waddr, eit_raddr;
  logic [CNT_W-1:0]        eit_wcount, eit_rcount;
  logic [NUM_CHIPLETS-1:0] eit_wtraj, eit_rtraj;
  logic                    srt_load, srt_start, srt_busy, srt_done;
  logic [AW-1:0]           srt_idx, srt_id;
  logic [CNT_W-1:0]        srt_key;
  logic [CNT_W-1:0]        sorted_key [NUM_EXPERTS];
  logic [AW-1:0]           sorted_id  [NUM_EXPERTS];
  logic [NUM_EXPERTS-1:0]  expert_cold, cold_keep;

  eit_reloader #(.NUM_EXPERTS(NUM_EXPERTS), .NUM_CHIPLETS(NUM_CHIPLETS), .CNT_W(CNT_W)) u_reloader (
    .clk, .rst_n, .start(rl_start), .theta_min,
    .in_valid(gate_valid), .in_ready(gate_ready), .in_id(gate_id), .in_count(gate_count), .in_traj(gate_traj),
    .done(rl_done),
    .eit_we, .eit_waddr, .eit_wcount, .eit_wtraj,
    .srt_load, .srt_idx, .srt_key, .srt_id,
    .expert_cold
  );

  eit #(.NUM_EXPERTS(NUM_EXPERTS), .NUM_CHIPLETS(NUM_CHIPLETS), .CNT_W(CNT_W)) u_eit (
    .clk, .we(eit_we), .waddr(eit_waddr), .wcount(eit_wcount), .wtraj(eit_wtraj),
    .raddr(eit_raddr), .rcount(eit_rcount), .rtraj(eit_rtraj)
  );

  bitonic_sorter #(.NUM_EXPERTS(NUM_EXPERTS), .CNT_W(CNT_W)) u_sorter (
    .clk, .rst_n, .load(srt_load), .load_idx(srt_idx), .load_key(srt_key), .load_id(srt_id),
    .start(srt_start), .busy(srt_busy), .done(srt_done), .sorted_key, .sorted_id
  );

  logic tb_eval;
  logic [7:0] tq_unused [NUM_REQ];
  logic [7:0] cfw_unused [NUM_REQ];
  token_buffering #(.NUM_REQ(NUM_REQ), .NUM_EXPERTS(NUM_EXPERTS), .TQ_W(8), .CFW_W(8)) u_tokbuf (
    .clk, .rst_n, .fwd_pass, .eval(tb_eval), .n_threshold,
    .req_active, .req_experts, .expert_cold,
    .defer, .cold_keep, .tqos(tq_unused), .cfw(cfw_unused)
  );

  // ---- pairing -> queue ----
  logic          pr_start, pr_we, pr_busy, pr_done;
  logic [AW-1:0] pr_idx, pr_id;
  logic [AW:0]   pr_len;

  expert_pairing #(.NUM_EXPERTS(NUM_EXPERTS), .CNT_W(CNT_W)) u_pairing (
    .clk, .rst_n, .start(pr_start), .theta_min, .sorted_key, .sorted_id, .cold_keep,
    .q_we(pr_we), .q_idx(pr_idx), .q_id(pr_id), .q_len(pr_len), .busy(pr_busy), .done(pr_done)
  );

  assign eit_raddr = pr_id;   // trajectory of the entry being written

  logic          qw_v;
  logic [AW-1:0] qw_idx, qw_id;
  logic          pr_done_d;

  logic [AW-1:0]           q_id   [NUM_EXPERTS];
  logic [NUM_CHIPLETS-1:0] q_traj [NUM_EXPERTS];
  logic [NUM_CHIPLETS-1:0] q_pre  [NUM_EXPERTS];
  logic [NUM_EXPERTS-1:0]  q_pend;
  logic [AW:0]             head;

  // ---- matcher ----
  logic [QWIN-1:0]         win_valid;
  logic [NUM_CHIPLETS-1:0] win_traj [QWIN];
  logic [NUM_CHIPLETS-1:0] win_pre  [QWIN];
  logic [AW-1:0]           win_idx  [QWIN];
  logic                    m_match, m_pre;
  logic [PW-1:0]           m_pos, m_pre_pos;
  logic [NUM_CHIPLETS-1:0] m_cstar, m_pre_chip;

  always_comb begin
    logic [AW+1:0] e;
    for (int unsigned k = 0; k < QWIN; k++) begin
      e = (AW+2)'(head) + (AW+2)'(k);
      win_idx[k]   = e[AW-1:0];
      win_valid[k] = (e < (AW+2)'(queue_len)) && q_pend[e[AW-1:0]];
      win_traj[k]  = q_traj[e[AW-1:0]];
      win_pre[k]   = q_pre[e[AW-1:0]];
    end
  end

  ec_matcher #(.NUM_CHIPLETS(NUM_CHIPLETS), .QWIN(QWIN)) u_matcher (
    .idle, .ctx_free(chip_ctx_free), .slot_room(chip_slot_room),
    .win_valid, .win_traj, .win_pre,
    .match(m_match), .match_pos(m_pos), .cstar(m_cstar),
    .pre(m_pre), .pre_pos(m_pre_pos), .pre_chiplet(m_pre_chip)
  );

  // ---- router and idle vector ----
  logic                    r_send;
  task_t                   r_pkt;
  logic [NUM_CHIPLETS-1:0] r_mask, release_mask;
  logic [15:0]             outstanding;
  logic [$clog2(HOLDOFF+1)-1:0] hold;

  sched_router #(.NUM_CHIPLETS(NUM_CHIPLETS)) u_router (
    .clk, .rst_n, .send(r_send), .send_pkt(r_pkt), .send_mask(r_mask),
    .task_valid, .task_pkt, .busy(chip_busy), .done_valid(chip_done),
    .release_mask, .outstanding
  );

  logic do_match, do_pre;
  assign do_match = (state == S_DISP) && (hold == '0) && m_match;
  assign do_pre   = (state == S_DISP) && (hold == '0) && !m_match && m_pre;

  idle_chiplet_vector #(.NUM_CHIPLETS(NUM_CHIPLETS)) u_icv (
    .clk, .rst_n, .alloc(do_match), .alloc_mask(q_traj[win_idx[m_pos]]),
    .release_mask, .idle
  );

  always_comb begin
    r_send = do_match || do_pre;
    r_pkt  = '0;
    r_mask = '0;
    if (do_match) begin
      r_pkt.preload = 1'b0;
      r_pkt.expert  = eid_t'(q_id[win_idx[m_pos]]);
      r_pkt.traj    = cmask_t'(q_traj[win_idx[m_pos]]);
      r_mask        = q_traj[win_idx[m_pos]];
    end else if (do_pre) begin
      r_pkt.preload = 1'b1;
      r_pkt.expert  = eid_t'(q_id[win_idx[m_pre_pos]]);
      r_pkt.traj    = cmask_t'(q_traj[win_idx[m_pre_pos]]);
      r_mask        = m_pre_chip;
    end
  end

  assign rl_start  = (state == S_IDLE) && layer_start;
  assign tb_eval   = rl_done;
  assign srt_start = rl_done;
  assign pr_start  = (state == S_SORT) && srt_done && !srt_busy;
  assign busy      = (state != S_IDLE);
  assign ev_dispatch = do_match;
  assign dispatch_cstar = do_match ? m_cstar : '0;
  assign ev_preload  = do_pre;
  assign ev_wait     = (state == S_DISP) && (hold == '0) && !m_match && !m_pre && (win_valid != '0);

  logic        first_seen;
  logic [15:0] lat_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      layer_done  <= 1'b0;
      qw_v        <= 1'b0;
      qw_idx      <= '0;
      qw_id       <= '0;
      pr_done_d   <= 1'b0;
      q_pend      <= '0;
      head        <= '0;
      queue_len   <= '0;
      hold        <= '0;
      first_seen  <= 1'b0;
      lat_cnt     <= '0;
      sched_latency <= '0;
      for (int unsigned i = 0; i < NUM_EXPERTS; i++) begin
        q_id[i]   <= '0;
        q_traj[i] <= '0;
        q_pre[i]  <= '0;
      end
    end else begin
      layer_done <= 1'b0;
      qw_v       <= pr_we;
      qw_idx     <= pr_idx;
      qw_id      <= pr_id;
      pr_done_d  <= pr_done;
      if (hold != '0) hold <= hold - 1'b1;
      if (state != S_IDLE && !first_seen) lat_cnt <= lat_cnt + 1'b1;

      // queue writes: the EIT read issued with pr_id returns the trajectory now
      if (qw_v) begin
        q_id[qw_idx]   <= qw_id;
        q_traj[qw_idx] <= eit_rtraj;
        q_pre[qw_idx]  <= '0;
        q_pend[qw_idx] <= 1'b1;
      end

      unique case (state)
        S_IDLE: if (layer_start) begin
          state      <= S_LOAD;
          q_pend     <= '0;
          head       <= '0;
          queue_len  <= '0;
          first_seen <= 1'b0;
          lat_cnt    <= '0;
        end
        S_LOAD: if (rl_done) state <= S_SORT;
        S_SORT: if (pr_start) state <= S_PAIR;
        S_PAIR: if (pr_done_d) begin
          state     <= S_DISP;
          queue_len <= pr_len;
        end
        S_DISP: begin
          if (head < queue_len && !q_pend[head[AW-1:0]]) head <= head + 1'b1;
          if (do_match) begin
            q_pend[win_idx[m_pos]] <= 1'b0;
            hold <= ($clog2(HOLDOFF+1))'(HOLDOFF);
            if (!first_seen) begin
              first_seen    <= 1'b1;
              sched_latency <= lat_cnt;
            end
          end else if (do_pre) begin
            q_pre[win_idx[m_pre_pos]] <= m_pre_chip;
            hold <= ($clog2(HOLDOFF+1))'(HOLDOFF);
          end
          if (head >= queue_len && hold == '0 && outstanding == '0 && !r_send) begin
            state      <= S_IDLE;
            layer_done <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // eit_rcount is not needed by the dispatcher: counts reach it through the sorter.
  logic unused_ok;
  assign unused_ok = ^{eit_rcount, pr_busy};

endmodule
