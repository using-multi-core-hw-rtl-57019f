// dist_calc_array: the distance calculator of one data quarter.
//
// K distance cores work side by side, one per centroid module, so that the
// distances from K points to K centroids are available together.  Core k
// compares point[k] with cent[k]; the caller decides what it feeds in (the
// same cell midpoint against every centroid, or a per-candidate cell vertex
// against a candidate or against the closest centroid).  The number of cores
// equals the number of clusters, as in the original design; the one-cycle
// output register is this design's own choice.
//
// Timing: l1_dist[k] in cycle t+1 holds the distance of the inputs in cycle t.
module dist_calc_array
  import kmeans_pkg::*;
#(
  parameter int unsigned DIM = DIM_DEF,
  parameter int unsigned K   = K_DEF
) (
  input  logic                     clk,
  input  coord_t [K-1:0][DIM-1:0]  point,
  input  coord_t [K-1:0][DIM-1:0]  cent,
  output dist_t  [K-1:0]           l1_dist
);

  dist_t [K-1:0] dist_c;

  for (genvar k = 0; k < K; k++) begin : g_core
    manhattan_dist #(.DIM(DIM)) u_core (
      .point (point[k]),
      .cent  (cent[k]),
      .l1_dist  (dist_c[k])
    );
  end

  always_ff @(posedge clk) l1_dist <= dist_c;

endmodule
