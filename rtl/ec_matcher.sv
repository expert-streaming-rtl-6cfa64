// ec_matcher: Expert-Chiplet matcher of the scheduler.
//
// Looks at the QWIN oldest pending entries of the scheduling queue, in queue
// order, and finds the first expert whose trajectory contains an idle
// chiplet (trajectory AND idle vector non-zero). That expert can start: its
// micro-slices begin streaming at c*, the lowest-numbered idle chiplet of its
// trajectory, and the whole trajectory is then taken out of the idle set by
// the caller. An entry also needs a free expert context on every chiplet of
// its trajectory, except a chiplet that already holds it from a pre-load.
//
// If no entry can start while some chiplet is idle, the first entry that has
// not been pre-loaded yet is offered for a Rule-4 pre-load on one chiplet of
// its own trajectory that has a free context and spare buffer room
// (slot_room); that chiplet fetches its share of the expert from DDR ahead
// of time.
//
// Purely combinational; the caller applies at most one result per clock.
// The window size, the choice of c* and of the pre-load chiplet are this
// design's choices; the paper gives the matching condition and Rule 4.
module ec_matcher #(
  parameter int unsigned NUM_CHIPLETS = 4,
  parameter int unsigned QWIN         = 8,
  localparam int unsigned PW = (QWIN > 1) ? $clog2(QWIN) : 1
) (
  input  logic [NUM_CHIPLETS-1:0] idle,
  input  logic [NUM_CHIPLETS-1:0] ctx_free,
  input  logic [NUM_CHIPLETS-1:0] slot_room,
  input  logic [QWIN-1:0]         win_valid,
  input  logic [NUM_CHIPLETS-1:0] win_traj [QWIN],
  input  logic [NUM_CHIPLETS-1:0] win_pre  [QWIN],
  output logic                    match,
  output logic [PW-1:0]           match_pos,
  output logic [NUM_CHIPLETS-1:0] cstar,
  output logic                    pre,
  output logic [PW-1:0]           pre_pos,
  output logic [NUM_CHIPLETS-1:0] pre_chiplet
);

  always_comb begin
    logic [NUM_CHIPLETS-1:0] hit, room;
    hit         = '0;
    room        = '0;
    match       = 1'b0;
    match_pos   = '0;
    cstar       = '0;
    pre         = 1'b0;
    pre_pos     = '0;
    pre_chiplet = '0;
    for (int unsigned k = 0; k < QWIN; k++) begin
      hit = win_traj[k] & idle;
      if (!match && win_valid[k] && hit != '0 &&
          (win_traj[k] & ~ctx_free & ~win_pre[k]) == '0) begin
        match     = 1'b1;
        match_pos = PW'(k);
        cstar     = hit & (~hit + 1'b1);
      end
    end
    if (!match && idle != '0) begin
      for (int unsigned k = 0; k < QWIN; k++) begin
        room = win_traj[k] & ctx_free & slot_room;
        if (!pre && win_valid[k] && win_pre[k] == '0 && room != '0) begin
          pre         = 1'b1;
          pre_pos     = PW'(k);
          pre_chiplet = room & (~room + 1'b1);
        end
      end
    end
  end

endmodule
