// cc_distance: closed-form distance function of the decoding graph.
//
// The CC decoder never walks the decoding graph; it computes distances from
// vertex coordinates.  This block converts two vertex ids into their
// (x1, x2, t) coordinates (see cc_pkg for the numbering) and returns
//   pair_dist      = 1/2 (|dx1| + |dx2| + |dx1+dt| + |dx2+dt|)
//                    the shortest path length when the graph has the
//                    space-like x1/x2 edges, time-like t edges and the three
//                    hook edges h1=(-1,0,1), h2=(0,-1,1), H=(-1,-1,1);
//   a_dist_logical = x1 of A, its distance to the logical (left) boundary;
//   a_dist_other   = d - x1 of A, its distance to the opposite boundary.
// The formulas are the paper's.  Keeping the two boundary distances apart
// (the paper quotes only their minimum) is needed to tell which boundary a
// cluster reaches.  Purely combinational; no clock.
module cc_distance
  import cc_pkg::*;
#(
  parameter int unsigned D      = 23,
  parameter int unsigned ROUNDS = 23,
  localparam int unsigned N     = num_vertices(D, ROUNDS),
  localparam int unsigned VW    = $clog2(N),
  localparam int unsigned DISTW = $clog2(2 * D + ROUNDS + 1)
) (
  input  logic [VW-1:0]    va,
  input  logic [VW-1:0]    vb,
  output logic [DISTW-1:0] pair_dist,
  output logic [DISTW-1:0] a_dist_logical,
  output logic [DISTW-1:0] a_dist_other
);

  int ax1, ax2, at, bx1, bx2, bt;

  always_comb begin
    ax1 = vid_x1(int'(va), D);
    ax2 = vid_x2(int'(va), D);
    at  = vid_t(int'(va), D);
    bx1 = vid_x1(int'(vb), D);
    bx2 = vid_x2(int'(vb), D);
    bt  = vid_t(int'(vb), D);
    pair_dist      = DISTW'(hook_distance(ax1, ax2, at, bx1, bx2, bt));
    a_dist_logical = DISTW'(ax1);
    a_dist_other   = DISTW'(int'(D) - ax1);
  end

endmodule
