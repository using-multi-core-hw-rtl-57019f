// kmeans_pkg: types and constants shared by the k-means filtering accelerator.
//
// Coordinates are unsigned fixed-point words of COORD_W bits.  A kd-tree node
// carries its bounding box (cell minimum and maximum per dimension), the sum of
// the points below it (wgtCent, ACC_W bits per dimension) and the number of
// those points (count).  Distances are Manhattan (L1) sums of DIST_W bits.
// The default sizes (15 dimensions, 20 clusters, four data quarters) are the
// ones the accelerator is evaluated with; the word widths are this design's
// own choice, since the original works on floating-point numbers.
package kmeans_pkg;

  // Word widths (own choice: the original datapath is floating point).
  localparam int unsigned COORD_W = 32;  // one coordinate of a point or centroid
  localparam int unsigned ACC_W   = 64;  // one dimension of a weighted centroid sum
  localparam int unsigned CNT_W   = 32;  // number of points under a node / in a cluster
  localparam int unsigned DIST_W  = COORD_W + 8;  // L1 distance, up to 256 dimensions
  localparam int unsigned ADDR_W  = 32;  // kd-tree node index in external memory

  // Default configuration of the accelerator.
  localparam int unsigned DIM_DEF    = 15;  // dimensions of a data point
  localparam int unsigned K_DEF      = 20;  // parallel centroid modules per quarter
  localparam int unsigned GROUPS_DEF = 4;   // data quarters, one per application core

  typedef logic [COORD_W-1:0] coord_t;
  typedef logic [ACC_W-1:0]   acc_t;
  typedef logic [CNT_W-1:0]   cnt_t;
  typedef logic [DIST_W-1:0]  dist_t;
  typedef logic [ADDR_W-1:0]  addr_t;

  // Which sums feed the update unit of quarter 0, and which centroids the
  // filtering engines read, in each phase of the two-level algorithm.
  typedef enum logic [1:0] {
    PH_LEVEL1 = 2'd0,  // every quarter filters its own tree with its own centroids
    PH_MERGE  = 2'd1,  // quarter 0's centroids are rebuilt from the combined clusters
    PH_LEVEL2 = 2'd2   // every quarter filters with the shared (quarter 0) centroids
  } phase_e;

  // Number of bits of one kd-tree node record as it arrives from memory:
  // {leaf, left, right, count, wgtCent[DIM], cell_max[DIM], cell_min[DIM]}.
  function automatic int unsigned node_width(int unsigned dim);
    return dim * (2 * COORD_W + ACC_W) + CNT_W + 2 * ADDR_W + 1;
  endfunction

endpackage
