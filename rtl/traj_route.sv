// traj_route: next-hop routing entry of a compute die for one expert.
//
// An expert's trajectory is a chiplet mask. Its micro-slices travel the
// member chiplets as a logical ring in ascending chiplet number, wrapping
// from the highest member back to the lowest. For the chiplet self_id this
// block gives the next member after it (next_hop), its own position among
// the members counted from the lowest (rank) and the number of members
// (len). rank is used to split the DDR loads of the expert between members.
// If self_id is not a member, next_hop is still the next member after it and
// rank counts the members below it.
//
// Purely combinational. The ring order is this design's choice: the paper
// schedules each trajectory as a logical ring with next-hop forwarding but
// does not fix the order of its members.
module traj_route
  import fse_pkg::*;
#(
  parameter int unsigned NUM_CHIPLETS = 4
) (
  input  cid_t                    self_id,
  input  logic [NUM_CHIPLETS-1:0] traj,
  output cid_t                    next_hop,
  output cid_t                    rank,
  output logic [CID_W:0]          len
);

  always_comb begin
    logic found_above, found_any;
    next_hop    = self_id;
    rank        = '0;
    len         = '0;
    found_above = 1'b0;
    found_any   = 1'b0;
    for (int unsigned c = 0; c < NUM_CHIPLETS; c++) begin
      if (traj[c]) begin
        len = len + 1'b1;
        if (c < 32'(self_id)) rank = rank + 1'b1;
        if (c > 32'(self_id) && !found_above) begin
          next_hop    = cid_t'(c);
          found_above = 1'b1;
        end
      end
    end
    if (!found_above) begin
      for (int unsigned c = 0; c < NUM_CHIPLETS; c++) begin
        if (traj[c] && !found_any) begin
          next_hop  = cid_t'(c);
          found_any = 1'b1;
        end
      end
    end
  end

endmodule
