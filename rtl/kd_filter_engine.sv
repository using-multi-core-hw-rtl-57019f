// kd_filter_engine: one pass of the kd-tree filtering algorithm over one tree.
//
// The engine walks a binary kd-tree held in external memory, carrying with
// each node the set of candidate centroids (a K-bit mask) that may still own
// points of that node's cell.  For every node it
//   1. finds z*, the candidate closest to the cell midpoint (for a leaf, whose
//      cell is its single point, the closest candidate to that point);
//   2. at a leaf, adds the point to z*'s weighted sum and count;
//   3. otherwise drops every candidate z that the pruning test of
//      dist_compare shows is never closer than z* inside the cell; if one
//      candidate is left the whole node (wgtCent, count) goes to it, if not,
//      both children are pushed on a stack with the reduced set.
// The pass ends when the stack is empty; acc_wgt/acc_cnt then hold the sums
// of the update step for every centroid.  This follows the filtering
// function of the paper's Algorithm 1, with the candidate removed being z
// (the listing prints z* at that line, the accompanying text and the
// original algorithm remove z).  The stack, its depth and the
// one-node-at-a-time fetch are this design's own choices.
//
// Interface.
//   start/root_addr/cand_init  start a pass at node root_addr with the
//                              candidates set in cand_init; acc_* are cleared.
//   cent                       the K centroids, stable during the pass.
//   node_req_*                 valid/ready request of the node with index
//                              node_req_addr; its record comes back on
//                              node_rsp_* (valid/ready), layout
//                              {leaf, left, right, count, wgt, max, min}.
//   done                       one-cycle pulse at the end of a pass.
//   overflow                   the stack was full and a node was dropped;
//                              the sums of such a pass are incomplete.
// Timing: an internal node costs seven cycles plus the memory latency (pop,
// request, midpoint distances, closest candidate, two vertex-distance
// cycles, decide); a leaf or a node with no candidate costs four plus the
// latency; the pass ends one cycle after the stack runs empty.
module kd_filter_engine
  import kmeans_pkg::*;
#(
  parameter int unsigned DIM         = DIM_DEF,
  parameter int unsigned K           = K_DEF,
  parameter int unsigned STACK_DEPTH = 64,
  localparam int unsigned KW     = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned NODE_W = node_width(DIM)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  addr_t                    root_addr,
  input  logic   [K-1:0]           cand_init,
  input  coord_t [K-1:0][DIM-1:0]  cent,
  output logic                     node_req_valid,
  input  logic                     node_req_ready,
  output addr_t                    node_req_addr,
  input  logic                     node_rsp_valid,
  output logic                     node_rsp_ready,
  input  logic   [NODE_W-1:0]      node_rsp_data,
  output logic                     busy,
  output logic                     done,
  output logic                     overflow,
  output acc_t   [K-1:0][DIM-1:0]  acc_wgt,
  output cnt_t   [K-1:0]           acc_cnt,
  output logic   [31:0]            st_nodes,    // nodes visited in the pass
  output logic   [31:0]            st_pruned,   // candidates removed
  output logic   [31:0]            st_whole,    // internal nodes given whole to one centroid
  output logic   [31:0]            st_leaves    // leaves assigned
);

  typedef struct packed {
    logic                  leaf;
    addr_t                 left;
    addr_t                 right;
    cnt_t                  count;
    acc_t   [DIM-1:0]      wgt;
    coord_t [DIM-1:0]      cmax;
    coord_t [DIM-1:0]      cmin;
  } node_t;

  typedef struct packed {
    addr_t          addr;
    logic [K-1:0]   mask;
  } frame_t;

  typedef enum logic [3:0] {
    S_IDLE, S_POP, S_REQ, S_WAIT, S_MID, S_ZSTAR, S_VTX_A, S_VTX_B, S_DECIDE
  } state_e;

  state_e  state;
  node_t   node;
  logic [K-1:0]  mask;
  logic [KW-1:0] zs;
  dist_t [K-1:0] dz_q;

  frame_t  stack [STACK_DEPTH];
  localparam int SPW = $clog2(STACK_DEPTH+1);  // stack pointer, 0..DEPTH
  localparam int SIW = $clog2(STACK_DEPTH);    // stack entry index
  logic [SPW-1:0] sp;

  coord_t [DIM-1:0]       midpoint;
  coord_t [K-1:0][DIM-1:0] vertex;
  coord_t [K-1:0][DIM-1:0] arr_point, arr_cent;
  dist_t  [K-1:0]          arr_dist;

  logic [KW-1:0] cmp_zstar;
  logic          cmp_any;
  logic [K-1:0]  cmp_mask;
  logic          cmp_single;
  logic [KW:0]   cmp_pruned;

  // Cell midpoint and, for every candidate, the cell vertex furthest towards it.
  always_comb begin
    for (int unsigned d = 0; d < DIM; d++)
      midpoint[d] = coord_t'(({1'b0, node.cmin[d]} + {1'b0, node.cmax[d]}) >> 1);
    for (int unsigned k = 0; k < K; k++)
      for (int unsigned d = 0; d < DIM; d++)
        vertex[k][d] = (cent[k][d] > cent[zs][d]) ? node.cmax[d] : node.cmin[d];
  end

  // Inputs of the K distance cores in each step.
  always_comb begin
    for (int unsigned k = 0; k < K; k++) begin
      unique case (state)
        S_VTX_A:          begin arr_point[k] = vertex[k]; arr_cent[k] = cent[k];  end
        S_VTX_B:          begin arr_point[k] = vertex[k]; arr_cent[k] = cent[zs]; end
        default:          begin arr_point[k] = midpoint;  arr_cent[k] = cent[k];  end
      endcase
    end
  end

  dist_calc_array #(.DIM(DIM), .K(K)) u_dist (
    .clk   (clk),
    .point (arr_point),
    .cent  (arr_cent),
    .l1_dist  (arr_dist)
  );

  dist_compare #(.K(K)) u_cmp (
    .mask     (mask),
    .dist_mid (arr_dist),
    .zstar    (cmp_zstar),
    .any      (cmp_any),
    .zstar_in (zs),
    .dist_z   (dz_q),
    .dist_s   (arr_dist),
    .new_mask (cmp_mask),
    .single   (cmp_single),
    .n_pruned (cmp_pruned)
  );

  assign node_req_valid = (state == S_REQ);
  assign node_rsp_ready = (state == S_WAIT);
  assign busy           = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      sp            <= '0;
      mask          <= '0;
      zs            <= '0;
      node          <= '0;
      dz_q          <= '0;
      node_req_addr <= '0;
      done          <= 1'b0;
      overflow      <= 1'b0;
      acc_wgt       <= '0;
      acc_cnt       <= '0;
      st_nodes      <= '0;
      st_pruned     <= '0;
      st_whole      <= '0;
      st_leaves     <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          acc_wgt   <= '0;
          acc_cnt   <= '0;
          overflow  <= 1'b0;
          st_nodes  <= '0;
          st_pruned <= '0;
          st_whole  <= '0;
          st_leaves <= '0;
          stack[0]  <= '{addr: root_addr, mask: cand_init};
          sp        <= 1;
          state     <= S_POP;
        end
        S_POP: begin
          if (sp == 0) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            node_req_addr <= stack[SIW'(sp - 1'b1)].addr;
            mask          <= stack[SIW'(sp - 1'b1)].mask;
            sp            <= sp - 1'b1;
            state         <= S_REQ;
          end
        end
        S_REQ:  if (node_req_ready) state <= S_WAIT;
        S_WAIT: if (node_rsp_valid) begin
          node     <= node_t'(node_rsp_data);
          st_nodes <= st_nodes + 1;
          state    <= S_MID;
        end
        S_MID:  state <= S_ZSTAR;   // midpoint distances are being registered
        S_ZSTAR: begin
          // arr_dist holds the midpoint distances: pick z*.
          zs <= cmp_zstar;
          if (!cmp_any) begin
            state <= S_POP;          // no candidate: nothing to assign
          end else if (node.leaf) begin
            for (int unsigned d = 0; d < DIM; d++)
              acc_wgt[cmp_zstar][d] <= acc_wgt[cmp_zstar][d] + node.wgt[d];
            acc_cnt[cmp_zstar] <= acc_cnt[cmp_zstar] + node.count;
            st_leaves <= st_leaves + 1;
            state     <= S_POP;
          end else begin
            state <= S_VTX_A;
          end
        end
        S_VTX_A: state <= S_VTX_B;  // distances candidate -> its vertex
        S_VTX_B: begin
          dz_q  <= arr_dist;        // candidate -> vertex distances
          state <= S_DECIDE;
        end
        S_DECIDE: begin
          // arr_dist now holds the z* -> vertex distances.
          st_pruned <= st_pruned + 32'(cmp_pruned);
          if (cmp_single) begin
            for (int unsigned d = 0; d < DIM; d++)
              acc_wgt[zs][d] <= acc_wgt[zs][d] + node.wgt[d];
            acc_cnt[zs] <= acc_cnt[zs] + node.count;
            st_whole    <= st_whole + 1;
          end else if (32'(sp) + 2 > STACK_DEPTH) begin
            overflow <= 1'b1;
          end else begin
            stack[SIW'(sp)]        <= '{addr: node.right, mask: cmp_mask};
            stack[SIW'(sp + 1'b1)] <= '{addr: node.left,  mask: cmp_mask};
            sp          <= sp + SPW'(2);
          end
          state <= S_POP;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A request is held until it is accepted.
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
    node_req_valid && !node_req_ready |=> node_req_valid && $stable(node_req_addr));

endmodule
