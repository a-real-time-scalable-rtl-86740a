// cc_pkg: constants, types and helper functions shared by the Collision
// Clustering (CC) decoder.
//
// The decoding graph of a distance-d rotated planar surface code measured for
// ROUNDS rounds is flattened into vertex ids.  Each round holds (d*d-1)/2
// vertices on a (d-1) x (d+1)/2 grid.  A vertex id is
//     vid = t*(d*d-1)/2 + x2*(d-1) + (x1-1),   x1 in 1..d-1, x2 in 0..(d-1)/2
// so that x1 is also the distance to the logical (left) boundary and d-x1 the
// distance to the opposite boundary.  The coordinate axes, the boundary
// distance min(x1, d-x1) and the hook-aware distance formula follow the paper;
// the numbering of vertices inside a round is this design's own choice.
package cc_pkg;

  // Kinds of request held in the Merge stack.  A PAIR links two defects; the
  // two boundary kinds attach one defect's cluster to a boundary.
  typedef enum logic [1:0] {
    MRG_PAIR     = 2'd0,
    MRG_BOUNDARY = 2'd1,  // the non-logical (right) boundary
    MRG_LOGICAL  = 2'd2   // the logical (left) boundary
  } merge_kind_e;

  // Which unit currently owns the shared memories.
  typedef enum logic [2:0] {
    PH_IDLE  = 3'd0,
    PH_INIT  = 3'd1,
    PH_GROW  = 3'd2,
    PH_MERGE = 3'd3,
    PH_DONE  = 3'd4
  } phase_e;

  // Vertices per round of syndrome measurement (Z-check graph).
  function automatic int unsigned nodes_per_round(int unsigned d);
    return (d * d - 1) / 2;
  endfunction

  // Vertices of the whole decoding graph.
  function automatic int unsigned num_vertices(int unsigned d, int unsigned rounds);
    return rounds * nodes_per_round(d);
  endfunction

  // Coordinates of a vertex id.
  function automatic int vid_x1(int unsigned vid, int unsigned d);
    return int'((vid % nodes_per_round(d)) % (d - 1)) + 1;
  endfunction

  function automatic int vid_x2(int unsigned vid, int unsigned d);
    return int'((vid % nodes_per_round(d)) / (d - 1));
  endfunction

  function automatic int vid_t(int unsigned vid, int unsigned d);
    return int'(vid / nodes_per_round(d));
  endfunction

  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  // Circuit-level graph distance (hook edges included):
  //   D = 1/2 (|dx1| + |dx2| + |dx1 + dt| + |dx2 + dt|)
  // The sum is always even, so the halving is exact.
  function automatic int unsigned hook_distance(int ax1, int ax2, int at,
                                                int bx1, int bx2, int bt);
    int dx1, dx2, dt;
    dx1 = ax1 - bx1;
    dx2 = ax2 - bx2;
    dt  = at - bt;
    return int'(unsigned'(iabs(dx1) + iabs(dx2) + iabs(dx1 + dt) + iabs(dx2 + dt)) >> 1);
  endfunction

endpackage
