// eit: Expert Information Table of one MoE layer.
//
// A table indexed by expert id. Each entry holds the number of tokens that
// activate the expert in the current iteration and the expert's trajectory,
// the set of chiplets holding those tokens, as an N-bit chiplet mask. The
// scheduler reads it to resolve an expert's trajectory in one lookup.
//
// Timing: one write port and one read port, both synchronous. Read data
// (rcount, rtraj) is valid the cycle after raddr is presented, as from a
// single-cycle SRAM. A write and a read of the same entry in the same cycle
// return the old contents. The contents are not reset; the reloader rewrites
// every entry at the start of each layer.
//
// From the paper: the table, its key (expert id) and its two fields. The
// trajectory is stored as a mask, as the paper's text describes it; the ring
// order along the mask is worked out on the compute dies (traj_route).
module eit #(
  parameter int unsigned NUM_EXPERTS  = 128,
  parameter int unsigned NUM_CHIPLETS = 4,
  parameter int unsigned CNT_W        = 11,
  localparam int unsigned AW = (NUM_EXPERTS > 1) ? $clog2(NUM_EXPERTS) : 1
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [AW-1:0]           waddr,
  input  logic [CNT_W-1:0]        wcount,
  input  logic [NUM_CHIPLETS-1:0] wtraj,
  input  logic [AW-1:0]           raddr,
  output logic [CNT_W-1:0]        rcount,
  output logic [NUM_CHIPLETS-1:0] rtraj
);

  logic [CNT_W-1:0]        count_mem [NUM_EXPERTS];
  logic [NUM_CHIPLETS-1:0] traj_mem  [NUM_EXPERTS];

  always_ff @(posedge clk) begin
    if (we) begin
      count_mem[waddr] <= wcount;
      traj_mem[waddr]  <= wtraj;
    end
    rcount <= count_mem[raddr];
    rtraj  <= traj_mem[raddr];
  end

endmodule
