// centroid_update: the update step of k-means for one set of K centroids.
//
// For every enabled cluster k with a non-zero count, the new centroid is the
// mean of its points, wgt[k][d] / cnt[k] (rounded down), computed by DIM
// dividers in parallel, one cluster after another.  A cluster with no points
// keeps its old centroid.  Each result is written out through cent_we /
// cent_k / cent_new, and changed reports at done whether any centroid moved,
// which is the convergence test of the iteration.  Computing the mean in the
// programmable logic follows the paper; the divider and the empty-cluster
// rule are this design's own choices.
//
// Timing: start is accepted when idle; every enabled, non-empty cluster takes
// ACC_W + 2 cycles, every other cluster one cycle; done pulses at the end.
module centroid_update
  import kmeans_pkg::*;
#(
  parameter int unsigned DIM = DIM_DEF,
  parameter int unsigned K   = K_DEF,
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic   [K-1:0]           k_mask,
  input  acc_t   [K-1:0][DIM-1:0]  wgt,
  input  cnt_t   [K-1:0]           cnt,
  input  coord_t [K-1:0][DIM-1:0]  cent_old,
  output logic                     busy,
  output logic                     done,
  output logic                     changed,
  output logic                     cent_we,
  output logic   [KW-1:0]          cent_k,
  output coord_t [DIM-1:0]         cent_new
);

  typedef enum logic [1:0] { U_IDLE, U_NEXT, U_DIV } ustate_e;
  ustate_e state;

  logic [KW-1:0]          k;
  logic                   div_start;
  logic [DIM-1:0]         div_done;
  acc_t [DIM-1:0]         quot;

  for (genvar d = 0; d < DIM; d++) begin : g_div
    seq_divider #(.N(ACC_W), .M(CNT_W)) u_div (
      .clk      (clk),
      .rst_n    (rst_n),
      .start    (div_start),
      .dividend (wgt[k][d]),
      .divisor  (cnt[k]),
      .busy     (),
      .done     (div_done[d]),
      .quot     (quot[d])
    );
  end

  assign busy = (state != U_IDLE);

  always_comb begin
    div_start = (state == U_NEXT) && k_mask[k] && (cnt[k] != '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= U_IDLE;
      k        <= '0;
      done     <= 1'b0;
      changed  <= 1'b0;
      cent_we  <= 1'b0;
      cent_k   <= '0;
      cent_new <= '0;
    end else begin
      done    <= 1'b0;
      cent_we <= 1'b0;
      unique case (state)
        U_IDLE: if (start) begin
          k       <= '0;
          changed <= 1'b0;
          state   <= U_NEXT;
        end
        U_NEXT: begin
          if (div_start) begin
            state <= U_DIV;
          end else begin
            // Disabled or empty cluster: keep its centroid.
            if (32'(k) == K - 1) begin
              done  <= 1'b1;
              state <= U_IDLE;
            end else begin
              k <= k + 1'b1;
            end
          end
        end
        U_DIV: if (div_done[0]) begin
          logic diff;
          diff = 1'b0;
          for (int unsigned d = 0; d < DIM; d++) begin
            cent_new[d] <= coord_t'(quot[d]);
            if (coord_t'(quot[d]) != cent_old[k][d]) diff = 1'b1;
          end
          cent_we <= 1'b1;
          cent_k  <= k;
          if (diff) changed <= 1'b1;
          if (32'(k) == K - 1) begin
            done  <= 1'b1;
            state <= U_IDLE;
          end else begin
            k     <= k + 1'b1;
            state <= U_NEXT;
          end
        end
        default: state <= U_IDLE;
      endcase
    end
  end

endmodule
