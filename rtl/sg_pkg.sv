// sg_pkg -- shared types and sizes of the streaming kNN pipeline.
//
// A point is three signed fixed-point coordinates. Points arrive split into
// chunks; each chunk is stored as a complete kd-tree in heap order (root at
// index 0, children of node i at 2i+1 and 2i+2, split dimension = depth mod 3).
// The search engine looks at a window of WIN consecutive chunks (the 1x2 chunk
// "stencil" of compulsory splitting) and returns the K nearest neighbours of
// each query, after at most a fixed number of traversal steps (deterministic
// termination).
//
// Numbers that follow the paper: K = 4 neighbours per query (the kNN stage of
// the dataflow example produces a 4x3 output), a 1x2 chunk window, three chunk
// slots in the chunk line buffer, two search PEs and two banks, and a deadline
// of one quarter of a full traversal of the window. Coordinate width, tree
// depth and every encoding are this design's own choices.
package sg_pkg;

  // Coordinate width in bits (signed).
  parameter int unsigned COORD_W = 16;
  // Squared Euclidean distance of two points: 3 * (2^COORD_W)^2 < 2^(2*COORD_W+2).
  parameter int unsigned DIST_W  = 2 * COORD_W + 2;

  typedef logic signed [COORD_W-1:0] coord_t;
  typedef logic        [DIST_W-1:0]  dist_t;

  typedef struct packed {
    coord_t x;
    coord_t y;
    coord_t z;
  } point_t;

  // One entry of a query's neighbour list.
  typedef struct packed {
    logic   valid;   // a neighbour was found for this rank
    dist_t  d2;      // squared distance to the query
    point_t pt;      // the neighbour's coordinates
  } nbr_t;


  // Coordinate of a point along dimension d (0 = x, 1 = y, 2 = z).
  function automatic coord_t coord_of(point_t p, logic [1:0] d);
    case (d)
      2'd0:    return p.x;
      2'd1:    return p.y;
      default: return p.z;
    endcase
  endfunction

  // Squared Euclidean distance.
  function automatic dist_t sq_dist(point_t a, point_t b);
    logic signed [2*COORD_W+1:0] dx, dy, dz;
    dx = (2*COORD_W+2)'(a.x) - (2*COORD_W+2)'(b.x);
    dy = (2*COORD_W+2)'(a.y) - (2*COORD_W+2)'(b.y);
    dz = (2*COORD_W+2)'(a.z) - (2*COORD_W+2)'(b.z);
    return dist_t'(dx * dx) + dist_t'(dy * dy) + dist_t'(dz * dz);
  endfunction

endpackage
