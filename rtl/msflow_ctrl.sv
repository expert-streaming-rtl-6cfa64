// msflow_ctrl: micro-slice flow controller of one compute die.
//
// Every expert is cut into NUM_MS micro-slices. An expert runs on a
// trajectory, a set of chiplets treated as a ring; each micro-slice must be
// computed once on every chiplet of the ring (each chiplet applies it to its
// own tokens) and is then dropped. This block decides, for its chiplet, what
// the expert buffer (NUM_SLOTS micro-slice slots) holds and which slot the PE
// array works on next, by four local rules:
//   Rule 1  a micro-slice received from the previous chiplet is computed as
//           soon as the PE array is free, and is sent on to the next chiplet
//           of its ring while it is being computed;
//   Rule 2  with nothing received waiting, any micro-slice fetched from DDR
//           into a local slot is computed and sent on the same way;
//   Rule 3  a micro-slice whose ring has no further chiplet to visit is
//           released as soon as its computation ends;
//   Rule 4  whenever there is room the chiplet fetches, one at a time, the
//           next micro-slice of its share from DDR. Member k of a T-chiplet
//           ring fetches micro-slices k, k+T, k+2T, ...
// With these rules the flows of several experts on the same chiplets mix
// without any central timetable.
//
// Up to NUM_CTX experts are open at once. A task packet opens an expert
// (run) or, for a Rule-4 pre-load, opens it on hold: a held expert fetches
// its share but is not computed until the run task for it arrives. An expert
// closes when all NUM_MS micro-slices have been computed here and none is
// left in a slot; done_valid then pulses with its id.
//
// Deadlock: slices of different rings share the slots, and a ring of full
// chiplets could wait on each other forever. Bubble flow control prevents
// this: forwarding a received slice needs one free slot at the next chiplet
// (the network's ready), injecting a local slice needs two free there
// (checked against peer_free), and a DDR fetch needs three free slots here
// (four for a held expert), so a fetch always leaves the two free slots a
// neighbour needs to inject into this chiplet. These limits are this design's own; the paper
// does not discuss deadlock.
//
// Interfaces (all valid/ready unless noted):
//   task_valid/task_pkt   one-clock strobe from the scheduler's router
//   rx_*                  micro-slice header arriving over the D2D network
//   tx_*                  micro-slice header leaving, to chiplet tx_dst
//   ddr_req_*             fetch request (expert, micro-slice, target slot);
//                         ddr_rsp_valid/ddr_rsp_slot strobe when it has landed
//   pe_start/pe_*         strobe starting a computation on a slot; the PE
//                         array strobes pe_done when it has finished
//   ev_*                  one-clock event strobes for statistics
// The weights themselves are moved by the DMU and read by the PE array by
// slot number; this block only keeps the slot descriptors.
module msflow_ctrl
  import fse_pkg::*;
#(
  parameter int unsigned NUM_CHIPLETS = 4,
  parameter int unsigned NUM_MS       = 8,
  parameter int unsigned NUM_SLOTS    = 5,
  parameter int unsigned NUM_CTX      = 4,
  localparam int unsigned SW = (NUM_SLOTS > 1) ? $clog2(NUM_SLOTS) : 1,
  localparam int unsigned XW = (NUM_CTX > 1) ? $clog2(NUM_CTX) : 1,
  localparam int unsigned FW = $clog2(NUM_SLOTS + 1),
  localparam int unsigned CW = (NUM_CHIPLETS > 1) ? $clog2(NUM_CHIPLETS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  cid_t            self_id,
  // tasks from the scheduler
  input  logic            task_valid,
  input  task_t           task_pkt,
  output logic            ctx_free,
  output logic            busy,
  output logic            done_valid,
  output eid_t            done_expert,
  // buffer occupancy, own and of every chiplet
  output logic [FW-1:0]   free_slots,
  input  logic [FW-1:0]   peer_free [NUM_CHIPLETS],
  // die-to-die receive
  input  logic            rx_valid,
  input  mshdr_t          rx_hdr,
  output logic            rx_ready,
  // die-to-die send
  output logic            tx_valid,
  output cid_t            tx_dst,
  output mshdr_t          tx_hdr,
  input  logic            tx_ready,
  // DDR fetch
  output logic            ddr_req_valid,
  output eid_t            ddr_req_expert,
  output msi_t            ddr_req_ms,
  output logic [SW-1:0]   ddr_req_slot,
  input  logic            ddr_req_ready,
  input  logic            ddr_rsp_valid,
  input  logic [SW-1:0]   ddr_rsp_slot,
  // PE array
  output logic            pe_start,
  output eid_t            pe_expert,
  output msi_t            pe_ms,
  output logic [SW-1:0]   pe_slot,
  input  logic            pe_done,
  // statistics
  output logic            ev_rule1,
  output logic            ev_rule2,
  output logic            ev_rule3,
  output logic            ev_rule4,
  output logic            ev_tx_stall
);

  typedef enum logic [1:0] {SL_FREE, SL_LOADING, SL_READY, SL_ACTIVE} slot_state_t;

  // ---- expert contexts ----
  logic                    c_valid [NUM_CTX];
  logic                    c_run   [NUM_CTX];
  eid_t                    c_exp   [NUM_CTX];
  cid_t                    c_next  [NUM_CTX];
  logic [CID_W:0]          c_len   [NUM_CTX];
  logic [MSI_W+1:0]        c_ldptr [NUM_CTX];
  logic [MSI_W:0]          c_ncomp [NUM_CTX];

  // ---- slot descriptors ----
  slot_state_t             s_st   [NUM_SLOTS];
  logic [XW-1:0]           s_ctx  [NUM_SLOTS];
  msi_t                    s_ms   [NUM_SLOTS];
  vis_t                    s_vis  [NUM_SLOTS];
  logic                    s_rcv  [NUM_SLOTS];
  logic                    s_cpend[NUM_SLOTS];  // computation not finished
  logic                    s_spend[NUM_SLOTS];  // forward not yet accepted

  logic                    pe_active;
  logic [SW-1:0]           pe_slot_q;
  logic                    tx_pend;
  logic [SW-1:0]           tx_slot;
  logic                    ddr_wait;            // request issued, data not landed

  // ---- routing entry of an incoming task ----
  cid_t           t_next, t_rank;
  logic [CID_W:0] t_len;
  traj_route #(.NUM_CHIPLETS(NUM_CHIPLETS)) u_route (
    .self_id (self_id),
    .traj    (task_pkt.traj[NUM_CHIPLETS-1:0]),
    .next_hop(t_next),
    .rank    (t_rank),
    .len     (t_len)
  );

  // ---- combinational choices ----
  logic [FW-1:0] n_free;
  logic          have_free;
  logic [SW-1:0] first_free, last_free;
  logic          rx_hit;
  logic [XW-1:0] rx_ctx;
  logic          task_hit, task_slot_ok;
  logic [XW-1:0] task_ctx, task_new;
  logic          cand_r, cand_l;
  logic [SW-1:0] cand_r_s, cand_l_s;
  logic          go;
  logic [SW-1:0] go_s;
  logic          go_fwd, go_rcv;
  logic          ld_go;
  logic [XW-1:0] ld_ctx;
  logic          fin;
  logic [XW-1:0] fin_ctx;

  always_comb begin
    n_free     = '0;
    have_free  = 1'b0;
    first_free = '0;
    last_free  = '0;
    for (int unsigned s = 0; s < NUM_SLOTS; s++) begin
      if (s_st[s] == SL_FREE) begin
        n_free = n_free + 1'b1;
        if (!have_free) first_free = SW'(s);
        have_free = 1'b1;
        last_free = SW'(s);
      end
    end
  end
  assign free_slots = n_free;

  // Context lookups for the received header and for an incoming task.
  always_comb begin
    rx_hit = 1'b0;  rx_ctx = '0;
    task_hit = 1'b0; task_ctx = '0;
    task_slot_ok = 1'b0; task_new = '0;
    for (int unsigned x = 0; x < NUM_CTX; x++) begin
      if (c_valid[x] && c_exp[x] == rx_hdr.expert && !rx_hit) begin
        rx_hit = 1'b1; rx_ctx = XW'(x);
      end
      if (c_valid[x] && c_exp[x] == task_pkt.expert && !task_hit) begin
        task_hit = 1'b1; task_ctx = XW'(x);
      end
      if (!c_valid[x] && !task_slot_ok) begin
        task_slot_ok = 1'b1; task_new = XW'(x);
      end
    end
  end
  assign ctx_free = task_slot_ok;

  assign rx_ready = have_free && rx_hit;

  // Rule 1 / Rule 2 candidates.
  always_comb begin
    cand_r = 1'b0; cand_r_s = '0;
    cand_l = 1'b0; cand_l_s = '0;
    for (int unsigned s = 0; s < NUM_SLOTS; s++) begin
      if (s_st[s] == SL_READY && c_run[s_ctx[s]]) begin
        if (s_rcv[s]) begin
          if (!cand_r) begin cand_r = 1'b1; cand_r_s = SW'(s); end
        end else begin
          // a local slice that has to travel on needs a bubble at the next hop
          if (!cand_l && (s_vis[s] <= vis_t'(1) ||
              peer_free[c_next[s_ctx[s]][CW-1:0]] >= FW'(2))) begin
            cand_l = 1'b1; cand_l_s = SW'(s);
          end
        end
      end
    end
  end

  always_comb begin
    go = 1'b0; go_s = '0; go_rcv = 1'b0;
    if (!pe_active) begin
      if (cand_r) begin
        go = 1'b1; go_s = cand_r_s; go_rcv = 1'b1;
      end else if (cand_l) begin
        go = 1'b1; go_s = cand_l_s;
      end
    end
    go_fwd = go && (s_vis[go_s] > vis_t'(1));
    // only one forward may be in flight
    if (go_fwd && tx_pend) begin
      go = 1'b0; go_fwd = 1'b0;
    end
  end

  // Rule 4: next fetch, running experts before held ones.
  always_comb begin
    ld_go = 1'b0; ld_ctx = '0;
    if (!ddr_wait && !ddr_req_valid) begin
      for (int unsigned x = 0; x < NUM_CTX; x++)
        if (!ld_go && c_valid[x] && c_run[x] && c_ldptr[x] < (MSI_W+2)'(NUM_MS) &&
            n_free >= FW'(3)) begin
          ld_go = 1'b1; ld_ctx = XW'(x);
        end
      for (int unsigned x = 0; x < NUM_CTX; x++)
        if (!ld_go && c_valid[x] && !c_run[x] && c_ldptr[x] < (MSI_W+2)'(NUM_MS) &&
            n_free >= FW'(4)) begin
          ld_go = 1'b1; ld_ctx = XW'(x);
        end
    end
  end

  // An expert is finished here when all its slices were computed and none
  // is left in a slot.
  always_comb begin
    logic used;
    fin = 1'b0; fin_ctx = '0;
    for (int unsigned x = 0; x < NUM_CTX; x++) begin
      used = 1'b0;
      for (int unsigned s = 0; s < NUM_SLOTS; s++)
        if (s_st[s] != SL_FREE && s_ctx[s] == XW'(x)) used = 1'b1;
      if (!fin && c_valid[x] && c_run[x] && c_ncomp[x] == (MSI_W+1)'(NUM_MS) && !used) begin
        fin = 1'b1; fin_ctx = XW'(x);
      end
    end
  end

  always_comb begin
    busy = 1'b0;
    for (int unsigned x = 0; x < NUM_CTX; x++)
      if (c_valid[x] && c_run[x]) busy = 1'b1;
  end

  assign tx_valid    = tx_pend;
  assign ev_tx_stall = tx_pend && !tx_ready;

  // ---- state ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned x = 0; x < NUM_CTX; x++) begin
        c_valid[x] <= 1'b0; c_run[x] <= 1'b0; c_exp[x] <= '0; c_next[x] <= '0;
        c_len[x] <= '0; c_ldptr[x] <= '0; c_ncomp[x] <= '0;
      end
      for (int unsigned s = 0; s < NUM_SLOTS; s++) begin
        s_st[s] <= SL_FREE; s_ctx[s] <= '0; s_ms[s] <= '0; s_vis[s] <= '0;
        s_rcv[s] <= 1'b0; s_cpend[s] <= 1'b0; s_spend[s] <= 1'b0;
      end
      pe_active <= 1'b0; pe_slot_q <= '0;
      tx_pend <= 1'b0; tx_slot <= '0; tx_dst <= '0; tx_hdr <= '0;
      ddr_wait <= 1'b0; ddr_req_valid <= 1'b0;
      ddr_req_expert <= '0; ddr_req_ms <= '0; ddr_req_slot <= '0;
      pe_start <= 1'b0; pe_expert <= '0; pe_ms <= '0; pe_slot <= '0;
      done_valid <= 1'b0; done_expert <= '0;
      ev_rule1 <= 1'b0; ev_rule2 <= 1'b0; ev_rule3 <= 1'b0; ev_rule4 <= 1'b0;
    end else begin
      pe_start   <= 1'b0;
      done_valid <= 1'b0;
      ev_rule1   <= 1'b0;
      ev_rule2   <= 1'b0;
      ev_rule3   <= 1'b0;
      ev_rule4   <= 1'b0;

      // tasks
      if (task_valid) begin
        if (task_hit) begin
          if (!task_pkt.preload) c_run[task_ctx] <= 1'b1;
        end else begin
          c_valid[task_new] <= 1'b1;
          c_run[task_new]   <= !task_pkt.preload;
          c_exp[task_new]   <= task_pkt.expert;
          c_next[task_new]  <= t_next;
          c_len[task_new]   <= t_len;
          c_ldptr[task_new] <= (MSI_W+2)'(t_rank);
          c_ncomp[task_new] <= '0;
        end
      end

      // expert finished here
      if (fin) begin
        c_valid[fin_ctx] <= 1'b0;
        c_run[fin_ctx]   <= 1'b0;
        done_valid       <= 1'b1;
        done_expert      <= c_exp[fin_ctx];
      end

      // receive into the first free slot
      if (rx_valid && rx_ready) begin
        s_st[first_free]  <= SL_READY;
        s_ctx[first_free] <= rx_ctx;
        s_ms[first_free]  <= rx_hdr.ms;
        s_vis[first_free] <= rx_hdr.visits;
        s_rcv[first_free] <= 1'b1;
      end

      // Rule 4: fetch into the last free slot (two are free, so the receive
      // above cannot take the same one)
      if (ddr_req_valid && ddr_req_ready) begin
        ddr_req_valid <= 1'b0;
        ddr_wait      <= 1'b1;
      end
      if (ld_go) begin
        ddr_req_valid     <= 1'b1;
        ddr_req_expert    <= c_exp[ld_ctx];
        ddr_req_ms        <= msi_t'(c_ldptr[ld_ctx]);
        ddr_req_slot      <= last_free;
        c_ldptr[ld_ctx]   <= c_ldptr[ld_ctx] + (MSI_W+2)'(c_len[ld_ctx]);
        s_st[last_free]   <= SL_LOADING;
        s_ctx[last_free]  <= ld_ctx;
        s_rcv[last_free]  <= 1'b0;
        s_ms[last_free]   <= msi_t'(c_ldptr[ld_ctx]);
        ev_rule4          <= 1'b1;
      end
      if (ddr_rsp_valid && ddr_wait) begin
        ddr_wait <= 1'b0;
        s_st[ddr_rsp_slot]  <= SL_READY;
        s_vis[ddr_rsp_slot] <= vis_t'(c_len[s_ctx[ddr_rsp_slot]]);
      end

      // Rules 1 and 2: start a computation, forward at the same time
      if (go) begin
        pe_start   <= 1'b1;
        pe_expert  <= c_exp[s_ctx[go_s]];
        pe_ms      <= s_ms[go_s];
        pe_slot    <= go_s;
        pe_active  <= 1'b1;
        pe_slot_q  <= go_s;
        s_st[go_s]    <= SL_ACTIVE;
        s_cpend[go_s] <= 1'b1;
        s_spend[go_s] <= go_fwd;
        ev_rule1 <= go_rcv;
        ev_rule2 <= !go_rcv;
        if (go_fwd) begin
          tx_pend <= 1'b1;
          tx_slot <= go_s;
          tx_dst  <= c_next[s_ctx[go_s]];
          tx_hdr  <= '{expert: c_exp[s_ctx[go_s]], ms: s_ms[go_s], visits: s_vis[go_s] - 1'b1};
        end
      end
      if (tx_pend && tx_ready) begin
        tx_pend <= 1'b0;
        s_spend[tx_slot] <= 1'b0;
      end
      if (pe_done && pe_active) begin
        pe_active <= 1'b0;
        s_cpend[pe_slot_q] <= 1'b0;
        c_ncomp[s_ctx[pe_slot_q]] <= c_ncomp[s_ctx[pe_slot_q]] + 1'b1;
      end

      // release a slot whose work is over (Rule 3 when it was the last visit)
      for (int unsigned s = 0; s < NUM_SLOTS; s++) begin
        if (s_st[s] == SL_ACTIVE && !s_cpend[s] && !s_spend[s]) begin
          s_st[s] <= SL_FREE;
          if (s_vis[s] <= vis_t'(1)) ev_rule3 <= 1'b1;
        end
      end
    end
  end

  // Checks of the protocol: a task always finds a context (the scheduler
  // only sends to chiplets that report a free one), a received header
  // belongs to an expert open here, and a waiting send stays unchanged.
  logic   tx_wait_q;
  mshdr_t tx_hdr_q;
  cid_t   tx_dst_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_wait_q <= 1'b0;
      tx_hdr_q  <= '0;
      tx_dst_q  <= '0;
    end else begin
      tx_wait_q <= tx_valid && !tx_ready;
      tx_hdr_q  <= tx_hdr;
      tx_dst_q  <= tx_dst;
      a_task_ctx: assert (!task_valid || task_hit || task_slot_ok)
        else $error("msflow_ctrl: task without a free context");
      a_rx_ctx: assert (!(rx_valid && have_free) || rx_hit)
        else $error("msflow_ctrl: micro-slice for an expert not open here");
      a_tx_stable: assert (!tx_wait_q || (tx_valid && tx_hdr == tx_hdr_q && tx_dst == tx_dst_q))
        else $error("msflow_ctrl: send changed while waiting");
    end
  end

  initial assert (NUM_CHIPLETS <= MAX_CHIPLETS && NUM_MS <= 2**MSI_W && NUM_SLOTS >= 3)
    else $error("msflow_ctrl: parameters out of range");

endmodule
