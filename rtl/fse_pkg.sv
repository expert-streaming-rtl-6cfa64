// fse_pkg: shared constants and packet formats of the expert-streaming
// scheduler and the compute-die micro-slice controllers.
//
// The widths here are upper bounds so that one packet format serves every
// array size the modules accept: up to 256 experts per layer, up to 16
// chiplets (a 4x4 array), up to 32 micro-slices per expert and token counts
// up to 2047 per expert and iteration. Module parameters choose the actual
// sizes and must stay inside these bounds. The field layout of the packets
// is this design's own choice; the paper defines no packet format.
package fse_pkg;

  localparam int unsigned MAX_CHIPLETS = 16;

  localparam int unsigned EID_W = 8;   // expert id
  localparam int unsigned CID_W = 4;   // chiplet id
  localparam int unsigned MSI_W = 5;   // micro-slice index within an expert
  localparam int unsigned VIS_W = 5;   // remaining chiplet visits of a micro-slice (0..16)

  typedef logic [EID_W-1:0]        eid_t;
  typedef logic [CID_W-1:0]        cid_t;
  typedef logic [MSI_W-1:0]        msi_t;
  typedef logic [VIS_W-1:0]        vis_t;
  typedef logic [MAX_CHIPLETS-1:0] cmask_t;   // trajectory / chiplet set, bit c = chiplet c

  // Task sent by the scheduler's router to a compute die.
  //   preload = 1: Rule-4 pre-load; the die may fetch its share of the
  //                expert's micro-slices but must not compute them yet.
  //   preload = 0: run the expert along trajectory traj (also starts a
  //                pre-loaded expert).
  typedef struct packed {
    logic   preload;
    eid_t   expert;
    cmask_t traj;
  } task_t;

  // Header of one micro-slice moving over the die-to-die network.
  // visits = number of chiplets, the receiver included, that still have to
  // compute with this micro-slice.
  typedef struct packed {
    eid_t expert;
    msi_t ms;
    vis_t visits;
  } mshdr_t;

  // Lowest set bit of a chiplet mask as a one-hot mask (zero if none).
  function automatic cmask_t lowest_one(input cmask_t m);
    return m & (~m + cmask_t'(1));
  endfunction

endpackage
