// cluster_merger: the combine step between the two levels of clustering.
//
// After every data quarter has converged on its own K clusters, cluster k of
// quarter 0 is joined with, in each other quarter g, the cluster whose
// centroid is nearest (Manhattan distance) to quarter 0's centroid k.  The
// joined cluster's weighted sum and count are the sums of the joined parts;
// dividing them (in centroid_update) gives the starting centroids of the
// second level.  Joining each cluster with the nearest clusters of the other
// quarters follows the paper; the choice of quarter 0 as reference, the
// nearest-match rule (a cluster of another quarter may be matched twice) and
// the sequencing are this design's own.
//
// Timing: start when idle; K * (GROUPS - 1) + 1 cycles later done pulses and
// m_wgt / m_cnt hold the joined sums.  Inputs must be stable meanwhile.
module cluster_merger
  import kmeans_pkg::*;
#(
  parameter int unsigned DIM    = DIM_DEF,
  parameter int unsigned K      = K_DEF,
  parameter int unsigned GROUPS = GROUPS_DEF,
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned GW = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  start,
  input  logic   [K-1:0]                        k_mask,
  input  coord_t [GROUPS-1:0][K-1:0][DIM-1:0]   cent,
  input  acc_t   [GROUPS-1:0][K-1:0][DIM-1:0]   wgt,
  input  cnt_t   [GROUPS-1:0][K-1:0]            cnt,
  output logic                                  busy,
  output logic                                  done,
  output acc_t   [K-1:0][DIM-1:0]               m_wgt,
  output cnt_t   [K-1:0]                        m_cnt
);

  logic          run;
  logic [KW-1:0] k;
  logic [GW-1:0] g;

  coord_t [K-1:0][DIM-1:0] ref_pt;
  dist_t  [K-1:0]          l1_dist;
  logic   [KW-1:0]         nearest;

  // Distances from quarter 0's centroid k to every centroid of quarter g.
  for (genvar j = 0; j < K; j++) begin : g_core
    assign ref_pt[j] = cent[0][k];
    manhattan_dist #(.DIM(DIM)) u_core (
      .point (ref_pt[j]),
      .cent  (cent[g][j]),
      .l1_dist  (l1_dist[j])
    );
  end

  always_comb begin
    dist_t best;
    logic  found;
    nearest = '0;
    best    = '1;
    found   = 1'b0;
    for (int unsigned j = 0; j < K; j++) begin
      if (k_mask[j] && (!found || l1_dist[j] < best)) begin
        best    = l1_dist[j];
        nearest = KW'(j);
        found   = 1'b1;
      end
    end
  end

  assign busy = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run   <= 1'b0;
      done  <= 1'b0;
      k     <= '0;
      g     <= '0;
      m_wgt <= '0;
      m_cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        run   <= 1'b1;
        k     <= '0;
        g     <= GW'(1);
        m_wgt <= wgt[0];
        m_cnt <= cnt[0];
      end else if (run) begin
        if (k_mask[k]) begin
          for (int unsigned d = 0; d < DIM; d++)
            m_wgt[k][d] <= m_wgt[k][d] + wgt[g][nearest][d];
          m_cnt[k] <= m_cnt[k] + cnt[g][nearest];
        end
        if (32'(g) == GROUPS - 1) begin
          g <= GW'(1);
          if (32'(k) == K - 1) begin
            run  <= 1'b0;
            done <= 1'b1;
          end else begin
            k <= k + 1'b1;
          end
        end else begin
          g <= g + 1'b1;
        end
      end
    end
  end

endmodule
