// two_level_ctrl: sequencer of the two-level clustering algorithm.
//
// Level 1: every data quarter runs filtering passes over its own kd-tree, each
// pass followed by an update of its own centroids, until its centroids stop
// changing (or max_iter passes).  The quarters run side by side; a quarter
// that has converged waits for the others.  Combine: the converged clusters
// of the four quarters are joined (cluster_merger) and quarter 0's update unit
// turns the joined sums into the shared starting centroids.  Level 2: all
// quarters filter their trees with the shared centroids, the sums of all
// quarters are added, and quarter 0's update unit updates the shared
// centroids, until they stop changing (or max_iter passes).  Filtering the
// four quarter trees with one centroid set and adding their sums gives the
// same sums as filtering the combined tree; that reading of the combined
// second level is this design's own.  Finally the results are written out.
//
// Interface: start (pulse) begins a run; phase tells the datapath which
// centroids the engines read and which sums quarter 0's update unit takes;
// *_start pulses go to the engines, update units, merger and result writer,
// whose *_done pulses come back.  l1_iters / l2_iters count the passes.
module two_level_ctrl
  import kmeans_pkg::*;
#(
  parameter int unsigned GROUPS = GROUPS_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [15:0]             max_iter,
  output phase_e                  phase,
  output logic [GROUPS-1:0]       eng_start,
  input  logic [GROUPS-1:0]       eng_done,
  output logic [GROUPS-1:0]       upd_start,
  input  logic [GROUPS-1:0]       upd_done,
  input  logic [GROUPS-1:0]       upd_changed,
  output logic                    merge_start,
  input  logic                    merge_done,
  output logic                    out_start,
  input  logic                    out_done,
  output logic                    busy,
  output logic                    done,
  output logic [GROUPS-1:0][15:0] l1_iters,
  output logic [15:0]             l2_iters
);

  typedef enum logic [3:0] {
    C_IDLE, C_L1_FILT, C_L1_UPD, C_MERGE, C_MERGE_UPD,
    C_L2_FILT, C_L2_UPD, C_OUT, C_DONE
  } cstate_e;

  cstate_e state;
  logic [GROUPS-1:0] active;   // quarters still iterating in level 1
  logic [GROUPS-1:0] pending;  // started units that have not reported done
  logic              launched;

  assign busy = (state != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= C_IDLE;
      phase       <= PH_LEVEL1;
      active      <= '0;
      pending     <= '0;
      launched    <= 1'b0;
      eng_start   <= '0;
      upd_start   <= '0;
      merge_start <= 1'b0;
      out_start   <= 1'b0;
      done        <= 1'b0;
      l1_iters    <= '0;
      l2_iters    <= '0;
    end else begin
      eng_start   <= '0;
      upd_start   <= '0;
      merge_start <= 1'b0;
      out_start   <= 1'b0;
      done        <= 1'b0;
      unique case (state)
        C_IDLE: if (start) begin
          active   <= '1;
          l1_iters <= '0;
          l2_iters <= '0;
          phase    <= PH_LEVEL1;
          launched <= 1'b0;
          state    <= C_L1_FILT;
        end
        C_L1_FILT: begin
          if (!launched) begin
            eng_start <= active;
            pending   <= active;
            launched  <= 1'b1;
          end else if ((pending & ~eng_done) == '0) begin
            launched <= 1'b0;
            state    <= C_L1_UPD;
          end else begin
            pending <= pending & ~eng_done;
          end
        end
        C_L1_UPD: begin
          if (!launched) begin
            upd_start <= active;
            pending   <= active;
            launched  <= 1'b1;
          end else begin
            logic [GROUPS-1:0] still;
            still = active;
            for (int unsigned g = 0; g < GROUPS; g++) begin
              if (pending[g] && upd_done[g]) begin
                l1_iters[g] <= l1_iters[g] + 1'b1;
                if (!upd_changed[g] || (l1_iters[g] + 1'b1) >= max_iter)
                  still[g] = 1'b0;
              end
            end
            active  <= still;
            pending <= pending & ~upd_done;
            if ((pending & ~upd_done) == '0) begin
              launched <= 1'b0;
              state    <= (still == '0) ? C_MERGE : C_L1_FILT;
            end
          end
        end
        C_MERGE: begin
          phase <= PH_MERGE;
          if (!launched) begin
            merge_start <= 1'b1;
            launched    <= 1'b1;
          end else if (merge_done) begin
            launched <= 1'b0;
            state    <= C_MERGE_UPD;
          end
        end
        C_MERGE_UPD: begin
          if (!launched) begin
            upd_start[0] <= 1'b1;
            launched     <= 1'b1;
          end else if (upd_done[0]) begin
            launched <= 1'b0;
            phase    <= PH_LEVEL2;
            state    <= C_L2_FILT;
          end
        end
        C_L2_FILT: begin
          if (!launched) begin
            eng_start <= '1;
            pending   <= '1;
            launched  <= 1'b1;
          end else if ((pending & ~eng_done) == '0) begin
            launched <= 1'b0;
            state    <= C_L2_UPD;
          end else begin
            pending <= pending & ~eng_done;
          end
        end
        C_L2_UPD: begin
          if (!launched) begin
            upd_start[0] <= 1'b1;
            launched     <= 1'b1;
          end else if (upd_done[0]) begin
            launched <= 1'b0;
            l2_iters <= l2_iters + 1'b1;
            state    <= (upd_changed[0] && (l2_iters + 1'b1) < max_iter) ? C_L2_FILT : C_OUT;
          end
        end
        C_OUT: begin
          if (!launched) begin
            out_start <= 1'b1;
            launched  <= 1'b1;
          end else if (out_done) begin
            launched <= 1'b0;
            state    <= C_DONE;
          end
        end
        C_DONE: begin
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
