// lpcn_pkg: sizes, types and helper functions shared by the L-PCN blocks.
//
// Sizes that follow the published configuration: 1024 input points, 512
// central points (subsets), K = 32 points per subset, 6 input and 128 output
// features per point, islands of 32 subsets (16 hubs), a Hub Cache of twice a
// subset (64 entries), a 16x16 systolic array and 16 distance lanes.
// Choices of this implementation: 10-bit unsigned coordinates, 16-bit signed
// features and weights, 32-bit results, a Sampled Octree of depth 3 (8x8x8
// voxels, the depth of the published example tree) and a Hub Octree as deep as
// a coordinate (10 levels, one leaf per distinct position).
package lpcn_pkg;

  parameter int unsigned COORD_W     = 10;   // bits per coordinate axis
  parameter int unsigned FEAT_W      = 16;   // input feature / weight width (signed)
  parameter int unsigned ACC_W       = 32;   // MLP result width (signed)
  parameter int unsigned N_POINTS    = 1024; // input points
  parameter int unsigned N_CENTRAL   = 512;  // central points = point subsets
  parameter int unsigned K_NEIGH     = 32;   // points per subset
  parameter int unsigned FEAT_IN     = 6;    // xyz offset + 3 extra features
  parameter int unsigned N_EXTRA     = 3;    // extra (non-xyz) features per point
  parameter int unsigned FEAT_OUT    = 128;  // MLP output width
  parameter int unsigned SA_DIM      = 16;   // systolic array rows = cols
  parameter int unsigned LANES       = 16;   // parallel distance calculators
  parameter int unsigned ISLAND_SIZE = 32;   // subsets per island
  parameter int unsigned HUB_ENTRIES = 64;   // Hub Cache entries (2 x subset)
  parameter int unsigned SOCT_DEPTH  = 3;    // Sampled Octree levels below root

  typedef logic [COORD_W-1:0] coord_t;

  typedef struct packed {
    coord_t x;
    coord_t y;
    coord_t z;
  } xyz_t;

  // One stored point: coordinates and the extra features.
  typedef struct packed {
    xyz_t                               pos;
    logic [N_EXTRA-1:0][FEAT_W-1:0]     feat;
  } point_t;

  // Squared Euclidean distance of two points (3 * (2^COORD_W)^2 fits 2*COORD_W+2 bits).
  function automatic logic [2*COORD_W+1:0] sqdist(xyz_t a, xyz_t b);
    logic signed [COORD_W:0] dx, dy, dz;
    dx = $signed({1'b0, a.x}) - $signed({1'b0, b.x});
    dy = $signed({1'b0, a.y}) - $signed({1'b0, b.y});
    dz = $signed({1'b0, a.z}) - $signed({1'b0, b.z});
    return (2*COORD_W+2)'(dx*dx) + (2*COORD_W+2)'(dy*dy) + (2*COORD_W+2)'(dz*dz);
  endfunction

  // Interleave the top LEVELS bits of each axis into a Morton code; level 1
  // (the octant under the root) takes the most significant bits.
  // Octant numbering: {x, y, z} bit, x most significant.
  function automatic logic [3*COORD_W-1:0] morton(xyz_t p, int unsigned levels);
    logic [3*COORD_W-1:0] m;
    m = '0;
    for (int l = 0; l < int'(COORD_W); l++) begin
      if (l < int'(levels)) begin
        m[3*(int'(levels)-1-l) +: 3] = {p.x[COORD_W-1-l], p.y[COORD_W-1-l], p.z[COORD_W-1-l]};
      end
    end
    return m;
  endfunction

endpackage
