// sltarch_pkg -- types and constants shared by the LoD-search core (LTcore)
// and the splatting core (SPcore).
//
// LTcore side: a tree node record as it is held in a subtree-cache line and
// streamed from DRAM (node ID, axis-aligned bounding box, child subtree ID,
// remaining subtree size), and the view description the LT units test every
// node against (six frustum planes, camera position, LoD granularity).
// SPcore side: the Gaussian record stored in the global buffer, the projected
// Gaussian produced by a projection unit, and the sort key.
//
// The field list of a node record (NID, AABB, child SID, size) follows the
// subtree-cache drawing of the architecture; every width and number format
// here is this design's own choice, the paper gives none.
package sltarch_pkg;

  // ---------------- LoD search ----------------
  localparam int unsigned NID_W   = 32;   // node (Gaussian) ID
  localparam int unsigned SID_W   = 24;   // subtree ID: 16 x 3 B = 48 B queue
  localparam int unsigned TAU_S   = 32;   // subtree size limit
  localparam int unsigned SIZE_W  = $clog2(TAU_S + 1);
  localparam int unsigned COORD_W = 16;   // signed scene coordinates, Q8.8

  typedef logic signed [COORD_W-1:0] coord_t;

  typedef struct packed {
    coord_t xmin, ymin, zmin;
    coord_t xmax, ymax, zmax;
  } aabb_t;

  // One node of a subtree, stored in depth-first order inside the subtree.
  // size      = number of nodes of this node's own subtree that lie inside
  //             the same SLTree subtree (the node itself included); adding it
  //             to the local index skips everything beneath the node.
  // child_sid = subtree that holds this node's children, 0 when none (the
  //             root subtree 0 is never anybody's child).
  typedef struct packed {
    logic [NID_W-1:0]  nid;
    aabb_t             aabb;
    logic [SID_W-1:0]  child_sid;
    logic [SIZE_W-1:0] size;
  } node_t;

  // Frustum plane a*x + b*y + c*z + d >= 0 on the inside.
  typedef struct packed {
    logic signed [15:0] a, b, c;
    logic signed [31:0] d;
  } plane_t;

  // gran: LoD granularity as the largest accepted ratio of node extent to
  // camera distance, unsigned Q8.8.
  typedef struct packed {
    plane_t [5:0]       planes;
    coord_t             camx, camy, camz;
    logic [15:0]        gran;
  } view_t;

  // ---------------- Splatting ----------------
  localparam int unsigned GID_W  = 12;    // index of a Gaussian in a global-buffer bank
  localparam int unsigned TILE   = 4;     // tile edge in pixels (2x2 SP units x 2x2 pixels)
  localparam int unsigned TILE_W = 8;     // tile index width
  localparam int unsigned DEPTH_W = 16;

  // Gaussian as stored in the global buffer (camera space).
  //   x, y : signed Q8.8;  z : unsigned Q8.8, z > 0
  //   cov  : 3D covariance xx, xy, xz, yy, yz, zz, signed Q8.8
  //   op   : opacity, Q0.8;  r, g, b : colour, 8 bit
  typedef struct packed {
    logic signed [15:0]      x, y;
    logic [15:0]             z;
    logic signed [5:0][15:0] cov;
    logic [7:0]              op;
    logic [7:0]              r, g, b;
  } gauss_t;

  // Projected Gaussian.
  //   u, v      : screen position, signed Q12.4 pixels
  //   ca, cb, cc: 2D conic (inverse 2D covariance), signed Q.16 per pixel^2
  //   tau       : threshold on the exponent, signed Q.8 (ln(1/(255*op)))
  //   radius    : 3-sigma radius in whole pixels
  typedef struct packed {
    logic                    valid;
    logic signed [15:0]      u, v;
    logic signed [31:0]      ca, cb, cc;
    logic signed [15:0]      tau;
    logic [15:0]             radius;
    logic [DEPTH_W-1:0]      depth;
    logic [7:0]              op;
    logic [7:0]              r, g, b;
  } proj_t;

  typedef struct packed {
    logic [TILE_W-1:0]  tile;
    logic [DEPTH_W-1:0] depth;
    logic [GID_W-1:0]   gid;
  } key_t;

  typedef struct packed {
    logic [7:0] r, g, b;
  } rgb_t;

  // Exponent of a 2D Gaussian at a point, -(ca*dx^2 + cc*dy^2)/2 - cb*dx*dy,
  // with the conic in signed Q.16 and dx, dy in Q.4 pixels; result Q.8,
  // saturated to 16 bits. Used by the alpha-check and the blend units.
  function automatic logic signed [31:0] gauss_power(
      input logic signed [31:0] ca, cb, cc,
      input logic signed [19:0] dx, dy);
    logic signed [63:0] qa, qb, qc, s;
    qa = 64'(ca) * 64'(dx) * 64'(dx);   // Q.24
    qb = 64'(cb) * 64'(dx) * 64'(dy);
    qc = 64'(cc) * 64'(dy) * 64'(dy);
    s  = -(((qa + qc) >>> 1) + qb);
    s  = s >>> 16;                      // Q.8
    if (s < -64'sd32768) s = -64'sd32768;
    if (s >  64'sd32767) s =  64'sd32767;
    return 32'(s);
  endfunction

endpackage
