// dist_compare: the comparison stage of one data quarter.
//
// Two combinational functions share this unit.
//  * Closest candidate: among the candidates whose bit is set in mask, zstar
//    is the index of the smallest dist_mid (ties go to the lower index).
//  * Pruning: for every other candidate z, dist_z[z] is the distance from z to
//    the cell vertex lying furthest in the direction from zstar towards z, and
//    dist_s[z] is the distance from zstar to that same vertex.  When zstar is
//    at least as close to that vertex (dist_s <= dist_z), no point of the cell
//    is closer to z than to zstar and z leaves the candidate set.
//    new_mask is the surviving set, single says one candidate remains, and
//    n_pruned counts the candidates removed.
// The filtering rule is the kd-tree filtering algorithm the accelerator
// builds on; choosing the vertex per dimension is exact for the L1 metric as
// well as for the Euclidean one.
module dist_compare
  import kmeans_pkg::*;
#(
  parameter int unsigned K = K_DEF,
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1
) (
  input  logic   [K-1:0] mask,
  input  dist_t  [K-1:0] dist_mid,
  output logic   [KW-1:0] zstar,
  output logic           any,
  input  logic   [KW-1:0] zstar_in,
  input  dist_t  [K-1:0] dist_z,
  input  dist_t  [K-1:0] dist_s,
  output logic   [K-1:0] new_mask,
  output logic           single,
  output logic   [KW:0]  n_pruned
);

  always_comb begin
    dist_t best;
    zstar = '0;
    any   = 1'b0;
    best  = '1;
    for (int unsigned k = 0; k < K; k++) begin
      if (mask[k] && (!any || dist_mid[k] < best)) begin
        best  = dist_mid[k];
        zstar = KW'(k);
        any   = 1'b1;
      end
    end
  end

  always_comb begin
    int unsigned left;
    new_mask = mask;
    n_pruned = '0;
    left     = 0;
    for (int unsigned k = 0; k < K; k++) begin
      if (mask[k] && KW'(k) != zstar_in && dist_s[k] <= dist_z[k]) begin
        new_mask[k] = 1'b0;
        n_pruned    = n_pruned + 1'b1;
      end
      if (new_mask[k]) left++;
    end
    single = (left == 1);
  end

endmodule
