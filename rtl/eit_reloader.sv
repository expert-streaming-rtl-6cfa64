// eit_reloader: refills the Expert Information Table for the next layer.
//
// After gating, the per-expert results of a layer (expert id, token count,
// trajectory mask) arrive as a stream, one entry per expert, over a
// valid/ready handshake; in the system they are read from DDR. For each
// accepted entry the reloader writes the EIT, loads the same (count, id)
// pair into the next position of the sorter, and records whether the expert
// is cold (it has tokens, but fewer than theta_min). After NUM_EXPERTS
// entries it pulses done.
//
// Timing: start (a pulse) clears the cold vector and opens the stream; one
// entry can be accepted per clock; done follows the clock of the last
// accepted entry. in_ready is low outside a reload. The paper only names this
// block and its DDR connection; the stream format is this design's own.
module eit_reloader #(
  parameter int unsigned NUM_EXPERTS  = 128,
  parameter int unsigned NUM_CHIPLETS = 4,
  parameter int unsigned CNT_W        = 11,
  localparam int unsigned AW = (NUM_EXPERTS > 1) ? $clog2(NUM_EXPERTS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [CNT_W-1:0]        theta_min,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [AW-1:0]           in_id,
  input  logic [CNT_W-1:0]        in_count,
  input  logic [NUM_CHIPLETS-1:0] in_traj,
  output logic                    done,
  // EIT write port
  output logic                    eit_we,
  output logic [AW-1:0]           eit_waddr,
  output logic [CNT_W-1:0]        eit_wcount,
  output logic [NUM_CHIPLETS-1:0] eit_wtraj,
  // sorter load port
  output logic                    srt_load,
  output logic [AW-1:0]           srt_idx,
  output logic [CNT_W-1:0]        srt_key,
  output logic [AW-1:0]           srt_id,
  // cold experts of this layer
  output logic [NUM_EXPERTS-1:0]  expert_cold
);

  logic        active;
  logic [AW:0] n;
  logic        take;

  assign in_ready   = active;
  assign take       = in_valid && in_ready;
  assign eit_we     = take;
  assign eit_waddr  = in_id;
  assign eit_wcount = in_count;
  assign eit_wtraj  = in_traj;
  assign srt_load   = take;
  assign srt_idx    = n[AW-1:0];
  assign srt_key    = in_count;
  assign srt_id     = in_id;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active      <= 1'b0;
      n           <= '0;
      done        <= 1'b0;
      expert_cold <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        active      <= 1'b1;
        n           <= '0;
        expert_cold <= '0;
      end else if (take) begin
        expert_cold[in_id] <= (in_count != '0) && (in_count < theta_min);
        n <= n + 1'b1;
        if (n == (AW+1)'(NUM_EXPERTS - 1)) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end

endmodule
