// manhattan_dist: one distance core.
//
// Computes the Manhattan (L1) distance sum_d |point[d] - cent[d]| between a
// point and a centroid in one combinational step: DIM absolute differences
// feed an adder chain that the synthesis tool balances.  The distance metric
// is the one the accelerator uses for all its distance work; evaluating all
// dimensions at once is this design's own choice.
//
// Interface: point and cent are DIM coordinates each; l1_dist is DIST_W bits and
// is valid in the same cycle (no register inside).
module manhattan_dist
  import kmeans_pkg::*;
#(
  parameter int unsigned DIM = DIM_DEF
) (
  input  coord_t [DIM-1:0] point,
  input  coord_t [DIM-1:0] cent,
  output dist_t            l1_dist
);

  always_comb begin
    l1_dist = '0;
    for (int unsigned d = 0; d < DIM; d++) begin
      if (point[d] > cent[d]) l1_dist += dist_t'(point[d]) - dist_t'(cent[d]);
      else                    l1_dist += dist_t'(cent[d]) - dist_t'(point[d]);
    end
  end

endmodule
