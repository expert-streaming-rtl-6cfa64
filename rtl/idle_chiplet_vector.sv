// idle_chiplet_vector: the Idle Chiplet Vector (ICV) of the scheduler.
//
// One bit per chiplet, 1 = idle. Allocating an expert clears the bits of its
// trajectory (idle AND NOT trajectory); a completion clears nothing and sets
// the bits of the chiplets that became free (idle OR release). Both updates
// are single bit-wise operations, as the paper describes. The vector is read
// combinationally by the matcher at any time.
//
// Timing: updates take effect at the next clock edge. release_mask may be
// raised in any cycle, whatever the scheduler is doing. If a chiplet is
// allocated and released in the same cycle it ends up busy: the release
// belongs to an older expert, the new one still has to run there. After
// reset every chiplet is idle (the scheduling algorithm starts with the idle
// set equal to all chiplets).
module idle_chiplet_vector #(
  parameter int unsigned NUM_CHIPLETS = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    alloc,
  input  logic [NUM_CHIPLETS-1:0] alloc_mask,
  input  logic [NUM_CHIPLETS-1:0] release_mask,
  output logic [NUM_CHIPLETS-1:0] idle
);

  logic [NUM_CHIPLETS-1:0] clear;
  assign clear = alloc ? alloc_mask : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) idle <= '1;
    else        idle <= (idle | release_mask) & ~clear;
  end

endmodule
