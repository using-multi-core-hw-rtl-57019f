// kmeans_pl_top: programmable-logic part of the two-level k-means accelerator.
//
// The data set is split into GROUPS quarters, each with its own kd-tree in
// DDR3 (built by software).  Every quarter has a filtering engine with K
// distance cores, a comparison/pruning unit and an update unit, fed from
// memory through a BRAM FIFO.  two_level_ctrl first lets every quarter
// converge on its own K clusters, joins the quarters' clusters
// (cluster_merger), and then iterates the joined centroids over all quarters
// together until they no longer change.  The final centroids and their
// cluster sizes leave through a result FIFO.  A processor programs runs
// through the AXI4-Lite register file (cfg_status_regs), which also holds the
// centroid window used to load the initial centroids and read the results.
// custom_pcie_dma moves host data between the PCIe stream and DDR3.
//
// The parts around this logic (processors, DDR3 controller and memory
// interconnect, PCIe hard block and its multi-channel DMA) are outside it;
// their connections are ports:
//   node_req_* / node_rsp_*   per-quarter kd-tree node reads (record index in,
//                             node record out, layout in kd_filter_engine)
//   res_*                     result stream: {k[7:0], count, centroid[DIM]}
//   s_axis_* / m_axis_*       128-bit streams to and from the PCIe DMA
//   m_aw* .. m_r*             64-bit AXI4 master of the DMA towards DDR3
//   s_aw* .. s_r*             AXI4-Lite register slave
// All logic runs on one clock, reset is asynchronous and active low.
module kmeans_pl_top
  import kmeans_pkg::*;
#(
  parameter int unsigned DIM             = DIM_DEF,
  parameter int unsigned K               = K_DEF,
  parameter int unsigned GROUPS          = GROUPS_DEF,
  parameter int unsigned STACK_DEPTH     = 64,
  parameter int unsigned NODE_FIFO_DEPTH = 16,
  parameter int unsigned RES_FIFO_DEPTH  = 32,
  parameter int unsigned DMA_BURST       = 16,
  localparam int unsigned KW     = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1,
  localparam int unsigned DW     = (DIM > 1) ? $clog2(DIM) : 1,
  localparam int unsigned NODE_W = node_width(DIM),
  localparam int unsigned RES_W  = 8 + CNT_W + DIM * COORD_W
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // AXI4-Lite register slave
  input  logic [15:0]                    s_awaddr,
  input  logic                           s_awvalid,
  output logic                           s_awready,
  input  logic [31:0]                    s_wdata,
  input  logic                           s_wvalid,
  output logic                           s_wready,
  output logic [1:0]                     s_bresp,
  output logic                           s_bvalid,
  input  logic                           s_bready,
  input  logic [15:0]                    s_araddr,
  input  logic                           s_arvalid,
  output logic                           s_arready,
  output logic [31:0]                    s_rdata,
  output logic [1:0]                     s_rresp,
  output logic                           s_rvalid,
  input  logic                           s_rready,
  // kd-tree node reads, one port per quarter
  output logic [GROUPS-1:0]              node_req_valid,
  input  logic [GROUPS-1:0]              node_req_ready,
  output addr_t [GROUPS-1:0]             node_req_addr,
  input  logic [GROUPS-1:0]              node_rsp_valid,
  output logic [GROUPS-1:0]              node_rsp_ready,
  input  logic [GROUPS-1:0][NODE_W-1:0]  node_rsp_data,
  // results
  output logic                           res_valid,
  input  logic                           res_ready,
  output logic [RES_W-1:0]               res_data,
  output logic                           irq_done,
  // PCIe streams
  input  logic [127:0]                   s_axis_tdata,
  input  logic                           s_axis_tvalid,
  output logic                           s_axis_tready,
  output logic [127:0]                   m_axis_tdata,
  output logic                           m_axis_tvalid,
  input  logic                           m_axis_tready,
  output logic                           m_axis_tlast,
  // DMA AXI4 master to DDR3
  output logic [31:0]                    m_awaddr,
  output logic [7:0]                     m_awlen,
  output logic [2:0]                     m_awsize,
  output logic [1:0]                     m_awburst,
  output logic                           m_awvalid,
  input  logic                           m_awready,
  output logic [63:0]                    m_wdata,
  output logic [7:0]                     m_wstrb,
  output logic                           m_wlast,
  output logic                           m_wvalid,
  input  logic                           m_wready,
  input  logic [1:0]                     m_bresp,
  input  logic                           m_bvalid,
  output logic                           m_bready,
  output logic [31:0]                    m_araddr,
  output logic [7:0]                     m_arlen,
  output logic [2:0]                     m_arsize,
  output logic [1:0]                     m_arburst,
  output logic                           m_arvalid,
  input  logic                           m_arready,
  input  logic [63:0]                    m_rdata,
  input  logic [1:0]                     m_rresp,
  input  logic                           m_rlast,
  input  logic                           m_rvalid,
  output logic                           m_rready
);

  // ---------------- configuration ----------------
  logic                    run_start, run_busy, run_done;
  logic [K-1:0]            k_mask;
  logic [15:0]             max_iter;
  addr_t [GROUPS-1:0]      root_addr;
  logic [31:0]             dma_waddr, dma_raddr, dma_len;
  logic                    dma_wstart, dma_rstart, dma_wbusy, dma_rbusy;
  logic                    cfg_we;
  logic [GW-1:0]           cfg_g, cfg_rg;
  logic [KW-1:0]           cfg_k, cfg_rk;
  logic [DW-1:0]           cfg_d, cfg_rd;
  coord_t                  cfg_wdata;
  logic [GROUPS-1:0][15:0] l1_iters;
  logic [15:0]             l2_iters;
  logic [31:0]             st_nodes_sum, st_pruned_sum;
  logic [GROUPS-1:0]       eng_overflow;

  // ---------------- centroids ----------------
  coord_t [GROUPS-1:0][K-1:0][DIM-1:0] cent_q;
  phase_e                              phase;

  // ---------------- per-quarter datapath ----------------
  logic   [GROUPS-1:0]                 eng_start, eng_done;
  logic   [GROUPS-1:0]                 upd_start, upd_done, upd_changed, upd_we;
  logic   [GROUPS-1:0][KW-1:0]         upd_k;
  coord_t [GROUPS-1:0][DIM-1:0]        upd_vec;
  acc_t   [GROUPS-1:0][K-1:0][DIM-1:0] acc_wgt;
  cnt_t   [GROUPS-1:0][K-1:0]          acc_cnt;
  logic   [GROUPS-1:0][31:0]           st_nodes, st_pruned, st_whole, st_leaves;

  acc_t   [K-1:0][DIM-1:0]             sum_wgt, m_wgt;
  cnt_t   [K-1:0]                      sum_cnt, m_cnt;
  logic                                merge_start, merge_done;
  logic                                out_start, out_done;

  for (genvar g = 0; g < GROUPS; g++) begin : g_grp
    logic                fifo_valid, fifo_ready;
    logic [NODE_W-1:0]   fifo_data;
    coord_t [K-1:0][DIM-1:0] eng_cent;
    acc_t   [K-1:0][DIM-1:0] upd_wgt;
    cnt_t   [K-1:0]          upd_cnt;

    bram_fifo #(.WIDTH(NODE_W), .DEPTH(NODE_FIFO_DEPTH)) u_node_fifo (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (node_rsp_valid[g]),
      .in_ready  (node_rsp_ready[g]),
      .in_data   (node_rsp_data[g]),
      .out_valid (fifo_valid),
      .out_ready (fifo_ready),
      .out_data  (fifo_data),
      .level     ()
    );

    assign eng_cent = (phase == PH_LEVEL1) ? cent_q[g] : cent_q[0];

    kd_filter_engine #(.DIM(DIM), .K(K), .STACK_DEPTH(STACK_DEPTH)) u_engine (
      .clk            (clk),
      .rst_n          (rst_n),
      .start          (eng_start[g]),
      .root_addr      (root_addr[g]),
      .cand_init      (k_mask),
      .cent           (eng_cent),
      .node_req_valid (node_req_valid[g]),
      .node_req_ready (node_req_ready[g]),
      .node_req_addr  (node_req_addr[g]),
      .node_rsp_valid (fifo_valid),
      .node_rsp_ready (fifo_ready),
      .node_rsp_data  (fifo_data),
      .busy           (),
      .done           (eng_done[g]),
      .overflow       (eng_overflow[g]),
      .acc_wgt        (acc_wgt[g]),
      .acc_cnt        (acc_cnt[g]),
      .st_nodes       (st_nodes[g]),
      .st_pruned      (st_pruned[g]),
      .st_whole       (st_whole[g]),
      .st_leaves      (st_leaves[g])
    );

    if (g == 0) begin : g_sel0
      // Quarter 0's update unit also computes the joined and shared centroids.
      always_comb begin
        unique case (phase)
          PH_MERGE:  begin upd_wgt = m_wgt;      upd_cnt = m_cnt;      end
          PH_LEVEL2: begin upd_wgt = sum_wgt;    upd_cnt = sum_cnt;    end
          default:   begin upd_wgt = acc_wgt[0]; upd_cnt = acc_cnt[0]; end
        endcase
      end
    end else begin : g_seln
      assign upd_wgt = acc_wgt[g];
      assign upd_cnt = acc_cnt[g];
    end

    centroid_update #(.DIM(DIM), .K(K)) u_update (
      .clk      (clk),
      .rst_n    (rst_n),
      .start    (upd_start[g]),
      .k_mask   (k_mask),
      .wgt      (upd_wgt),
      .cnt      (upd_cnt),
      .cent_old (cent_q[g]),
      .busy     (),
      .done     (upd_done[g]),
      .changed  (upd_changed[g]),
      .cent_we  (upd_we[g]),
      .cent_k   (upd_k[g]),
      .cent_new (upd_vec[g])
    );
  end

  // Centroid registers: written by the processor or by the update units.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cent_q <= '0;
    end else begin
      if (cfg_we) cent_q[cfg_g][cfg_k][cfg_d] <= cfg_wdata;
      for (int unsigned g = 0; g < GROUPS; g++)
        if (upd_we[g]) cent_q[g][upd_k[g]] <= upd_vec[g];
    end
  end

  // Sums over all quarters (level 2) and statistics.
  always_comb begin
    sum_wgt       = '0;
    sum_cnt       = '0;
    st_nodes_sum  = '0;
    st_pruned_sum = '0;
    for (int unsigned g = 0; g < GROUPS; g++) begin
      for (int unsigned k = 0; k < K; k++) begin
        for (int unsigned d = 0; d < DIM; d++) sum_wgt[k][d] += acc_wgt[g][k][d];
        sum_cnt[k] += acc_cnt[g][k];
      end
      st_nodes_sum  += st_nodes[g];
      st_pruned_sum += st_pruned[g];
    end
  end

  cluster_merger #(.DIM(DIM), .K(K), .GROUPS(GROUPS)) u_merge (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (merge_start),
    .k_mask (k_mask),
    .cent   (cent_q),
    .wgt    (acc_wgt),
    .cnt    (acc_cnt),
    .busy   (),
    .done   (merge_done),
    .m_wgt  (m_wgt),
    .m_cnt  (m_cnt)
  );

  two_level_ctrl #(.GROUPS(GROUPS)) u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .start       (run_start),
    .max_iter    (max_iter),
    .phase       (phase),
    .eng_start   (eng_start),
    .eng_done    (eng_done),
    .upd_start   (upd_start),
    .upd_done    (upd_done),
    .upd_changed (upd_changed),
    .merge_start (merge_start),
    .merge_done  (merge_done),
    .out_start   (out_start),
    .out_done    (out_done),
    .busy        (run_busy),
    .done        (run_done),
    .l1_iters    (l1_iters),
    .l2_iters    (l2_iters)
  );

  assign irq_done = run_done;

  // ---------------- result writer ----------------
  logic             out_run;
  logic [KW-1:0]    out_k;
  logic             rf_valid, rf_ready;
  logic [RES_W-1:0] rf_data;

  assign rf_valid = out_run && k_mask[out_k];
  assign rf_data  = {8'(out_k), sum_cnt[out_k], cent_q[0][out_k]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_run  <= 1'b0;
      out_k    <= '0;
      out_done <= 1'b0;
    end else begin
      out_done <= 1'b0;
      if (out_start) begin
        out_run <= 1'b1;
        out_k   <= '0;
      end else if (out_run && (!k_mask[out_k] || rf_ready)) begin
        if (32'(out_k) == K - 1) begin
          out_run  <= 1'b0;
          out_done <= 1'b1;
        end else begin
          out_k <= out_k + 1'b1;
        end
      end
    end
  end

  bram_fifo #(.WIDTH(RES_W), .DEPTH(RES_FIFO_DEPTH)) u_res_fifo (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (rf_valid),
    .in_ready  (rf_ready),
    .in_data   (rf_data),
    .out_valid (res_valid),
    .out_ready (res_ready),
    .out_data  (res_data),
    .level     ()
  );

  // ---------------- registers ----------------
  cfg_status_regs #(.DIM(DIM), .K(K), .GROUPS(GROUPS)) u_regs (
    .clk          (clk),
    .rst_n        (rst_n),
    .s_awaddr     (s_awaddr),
    .s_awvalid    (s_awvalid),
    .s_awready    (s_awready),
    .s_wdata      (s_wdata),
    .s_wvalid     (s_wvalid),
    .s_wready     (s_wready),
    .s_bresp      (s_bresp),
    .s_bvalid     (s_bvalid),
    .s_bready     (s_bready),
    .s_araddr     (s_araddr),
    .s_arvalid    (s_arvalid),
    .s_arready    (s_arready),
    .s_rdata      (s_rdata),
    .s_rresp      (s_rresp),
    .s_rvalid     (s_rvalid),
    .s_rready     (s_rready),
    .run_start    (run_start),
    .k_mask       (k_mask),
    .max_iter     (max_iter),
    .root_addr    (root_addr),
    .dma_waddr    (dma_waddr),
    .dma_raddr    (dma_raddr),
    .dma_len      (dma_len),
    .dma_wstart   (dma_wstart),
    .dma_rstart   (dma_rstart),
    .cent_we      (cfg_we),
    .cent_g       (cfg_g),
    .cent_k       (cfg_k),
    .cent_d       (cfg_d),
    .cent_wdata   (cfg_wdata),
    .cent_rg      (cfg_rg),
    .cent_rk      (cfg_rk),
    .cent_rd      (cfg_rd),
    .cent_rdata   (cent_q[cfg_rg][cfg_rk][cfg_rd]),
    .run_busy     (run_busy),
    .run_done     (run_done),
    .eng_overflow (|eng_overflow),
    .dma_busy     (dma_wbusy | dma_rbusy),
    .l1_iters     (l1_iters),
    .l2_iters     (l2_iters),
    .st_nodes     (st_nodes_sum),
    .st_pruned    (st_pruned_sum)
  );

  // ---------------- PCIe DMA ----------------
  custom_pcie_dma #(.BURST(DMA_BURST)) u_dma (
    .clk           (clk),
    .rst_n         (rst_n),
    .wstart        (dma_wstart),
    .rstart        (dma_rstart),
    .waddr         (dma_waddr),
    .raddr         (dma_raddr),
    .len           (dma_len),
    .wbusy         (dma_wbusy),
    .rbusy         (dma_rbusy),
    .s_axis_tdata  (s_axis_tdata),
    .s_axis_tvalid (s_axis_tvalid),
    .s_axis_tready (s_axis_tready),
    .m_axis_tdata  (m_axis_tdata),
    .m_axis_tvalid (m_axis_tvalid),
    .m_axis_tready (m_axis_tready),
    .m_axis_tlast  (m_axis_tlast),
    .m_awaddr      (m_awaddr),
    .m_awlen       (m_awlen),
    .m_awsize      (m_awsize),
    .m_awburst     (m_awburst),
    .m_awvalid     (m_awvalid),
    .m_awready     (m_awready),
    .m_wdata       (m_wdata),
    .m_wstrb       (m_wstrb),
    .m_wlast       (m_wlast),
    .m_wvalid      (m_wvalid),
    .m_wready      (m_wready),
    .m_bresp       (m_bresp),
    .m_bvalid      (m_bvalid),
    .m_bready      (m_bready),
    .m_araddr      (m_araddr),
    .m_arlen       (m_arlen),
    .m_arsize      (m_arsize),
    .m_arburst     (m_arburst),
    .m_arvalid     (m_arvalid),
    .m_arready     (m_arready),
    .m_rdata       (m_rdata),
    .m_rresp       (m_rresp),
    .m_rlast       (m_rlast),
    .m_rvalid      (m_rvalid),
    .m_rready      (m_rready)
  );

endmodule
