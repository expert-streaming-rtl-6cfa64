// sched_router: scheduler side of the task network between the IO die and
// the compute dies.
//
// Downstream it delivers task packets: a send request with a packet and a
// chiplet mask is registered and appears one clock later on task_valid of
// every chiplet in the mask, with the same packet on task_pkt. Upstream it
// watches each chiplet's busy signal (the chiplet has at least one expert
// running) and turns a falling edge into a bit of release_mask, which returns
// the chiplet to the idle set: a chiplet is idle again once no running expert
// engages it. It also keeps outstanding, the number of (expert, chiplet)
// pairs started but not yet reported finished through done_valid; the
// scheduler uses it to know when a layer is complete.
//
// The packet format, the one-clock latency and the busy/done signalling are
// this design's choices; the paper only says that each die's router receives
// task sequences from the scheduler.
module sched_router
  import fse_pkg::*;
#(
  parameter int unsigned NUM_CHIPLETS = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    send,
  input  task_t                   send_pkt,
  input  logic [NUM_CHIPLETS-1:0] send_mask,
  output logic [NUM_CHIPLETS-1:0] task_valid,
  output task_t                   task_pkt,
  input  logic [NUM_CHIPLETS-1:0] busy,
  input  logic [NUM_CHIPLETS-1:0] done_valid,
  output logic [NUM_CHIPLETS-1:0] release_mask,
  output logic [15:0]             outstanding
);

  logic [NUM_CHIPLETS-1:0] busy_q;
  logic [4:0]              n_start, n_done;

  always_comb begin
    n_start = '0;
    n_done  = '0;
    for (int unsigned c = 0; c < NUM_CHIPLETS; c++) begin
      if (send && !send_pkt.preload && send_mask[c]) n_start = n_start + 1'b1;
      if (done_valid[c])                             n_done  = n_done + 1'b1;
    end
  end

  assign release_mask = busy_q & ~busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      task_valid  <= '0;
      task_pkt    <= '0;
      busy_q      <= '0;
      outstanding <= '0;
    end else begin
      task_valid  <= send ? send_mask : '0;
      if (send) task_pkt <= send_pkt;
      busy_q      <= busy;
      outstanding <= outstanding + 16'(n_start) - 16'(n_done);
    end
  end

  initial assert (NUM_CHIPLETS <= MAX_CHIPLETS)
    else $error("sched_router: at most %0d chiplets", MAX_CHIPLETS);

endmodule
