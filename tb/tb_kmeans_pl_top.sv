// tb_kmeans_pl_top: end-to-end test of the accelerator at its default size.
//
// Builds a blob-shaped data set of four quarters, the kd-tree of every
// quarter and the initial centroids (the first points of each quarter), as
// the host software would, and keeps the trees in a memory model that answers
// node reads with random latency and random stalls.  The accelerator is
// programmed over AXI4-Lite, runs the full two-level clustering, and its
// result stream, iteration counters and centroid window are compared with a
// brute-force Lloyd reference.  A second run uses 5 clusters and a pass limit
// of 2 (clusters and limit are run-time settings).  The DMA moves a block
// from the PCIe stream into a DDR3 model and back.
// Mechanisms counted (each must occur): candidate pruning, whole-node
// assignment, leaf assignment, child push, level-1 convergence, pass-limit
// stop, combine step, level-2 pass, node-read stall, both DMA directions.
module tb_kmeans_pl_top;
  import kmeans_pkg::*;
  import kmeans_tb_pkg::*;

  localparam int DIM = DIM_DEF, K = K_DEF, G = GROUPS_DEF;
  localparam int NODE_W = node_width(DIM);
  localparam int RES_W  = 8 + CNT_W + DIM * COORD_W;
  localparam int NQ     = 96;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- DUT signals ----
  logic [15:0] s_awaddr, s_araddr;
  logic        s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic        s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [1:0]  s_bresp, s_rresp;
  logic [G-1:0]             node_req_valid, node_req_ready, node_rsp_valid, node_rsp_ready;
  addr_t [G-1:0]            node_req_addr;
  logic [G-1:0][NODE_W-1:0] node_rsp_data;
  logic             res_valid, res_ready, irq_done;
  logic [RES_W-1:0] res_data;
  logic [127:0] s_axis_tdata, m_axis_tdata;
  logic         s_axis_tvalid, s_axis_tready, m_axis_tvalid, m_axis_tready, m_axis_tlast;
  logic [31:0]  m_awaddr, m_araddr;
  logic [7:0]   m_awlen, m_arlen, m_wstrb;
  logic [2:0]   m_awsize, m_arsize;
  logic [1:0]   m_awburst, m_arburst, m_bresp, m_rresp;
  logic         m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic         m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic [63:0]  m_wdata, m_rdata;

  kmeans_pl_top dut (.*);

  // ---- watchdog ----
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- node memory model, one port per quarter ----
  int stalls = 0;
  for (genvar g = 0; g < G; g++) begin : g_mem
    int    lat;
    addr_t a;
    initial begin
      node_req_ready[g] = 0;
      node_rsp_valid[g] = 0;
      node_rsp_data[g]  = '0;
      forever begin
        @(posedge clk);
        node_req_ready[g] <= ($urandom % 4) != 0;
        if (rst_n && node_req_valid[g] && node_req_ready[g]) begin
          a = node_req_addr[g];
          node_req_ready[g] <= 0;
          lat = 1 + int'($urandom % 4);
          repeat (lat) @(posedge clk);
          node_rsp_valid[g] <= 1;
          node_rsp_data[g]  <= pack_node(int'(a));
          @(posedge clk);
          while (!node_rsp_ready[g]) @(posedge clk);
          node_rsp_valid[g] <= 0;
        end else if (rst_n && node_req_valid[g]) begin
          stalls++;
        end
      end
    end
  end

  // ---- mechanism counters ----
  longint n_pruned = 0, n_whole = 0, n_leaf = 0, n_push = 0;
  int     n_merge = 0;
  int     n_l2 = 0;
  for (genvar g = 0; g < G; g++) begin : g_mon
    always @(posedge clk) if (rst_n && dut.g_grp[g].u_engine.done) begin
      n_pruned += dut.g_grp[g].u_engine.st_pruned;
      n_whole  += dut.g_grp[g].u_engine.st_whole;
      n_leaf   += dut.g_grp[g].u_engine.st_leaves;
      n_push   += dut.g_grp[g].u_engine.st_nodes;
      check(!dut.g_grp[g].u_engine.overflow, "engine stack overflow");
    end
  end
  always @(posedge clk) begin
    if (rst_n && dut.merge_done) n_merge++;
  end

  // ---- AXI4-Lite master ----
  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(posedge clk);
    s_awaddr <= a; s_wdata <= d; s_awvalid <= 1; s_wvalid <= 1;
    do @(posedge clk); while (!s_awready);
    s_awvalid <= 0; s_wvalid <= 0;
    while (!s_bvalid) @(posedge clk);
  endtask
  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(posedge clk);
    s_araddr <= a; s_arvalid <= 1;
    do @(posedge clk); while (!s_arready);
    s_arvalid <= 0;
    while (!s_rvalid) @(posedge clk);
    d = s_rdata;
  endtask

  // ---- DDR3 model for the DMA (AXI4 slave, 64-bit) ----
  logic [63:0] ddr [logic [31:0]];
  initial begin
    m_awready = 0; m_wready = 0; m_bvalid = 0; m_bresp = 0;
    forever begin
      logic [31:0] a; int n;
      @(posedge clk);
      if (rst_n && m_awvalid) begin
        m_awready <= 1; a = m_awaddr; n = int'(m_awlen) + 1;
        @(posedge clk); m_awready <= 0;
        for (int i = 0; i < n; i++) begin
          m_wready <= ($urandom % 3) != 0;
          @(posedge clk);
          while (!(m_wvalid && m_wready)) begin m_wready <= ($urandom % 3) != 0; @(posedge clk); end
          ddr[a + 32'(8 * i)] = m_wdata;
          check(m_wlast == (i == n - 1), "DMA wlast position");
          m_wready <= 0;
        end
        m_bvalid <= 1;
        @(posedge clk); while (!m_bready) @(posedge clk);
        m_bvalid <= 0;
      end
    end
  end
  initial begin
    m_arready = 0; m_rvalid = 0; m_rdata = 0; m_rlast = 0; m_rresp = 0;
    forever begin
      logic [31:0] a; int n;
      @(posedge clk);
      if (rst_n && m_arvalid) begin
        m_arready <= 1; a = m_araddr; n = int'(m_arlen) + 1;
        @(posedge clk); m_arready <= 0;
        for (int i = 0; i < n; i++) begin
          m_rvalid <= 1; m_rdata <= ddr.exists(a + 32'(8 * i)) ? ddr[a + 32'(8 * i)] : 64'd0;
          m_rlast <= (i == n - 1);
          @(posedge clk);
          while (!m_rready) @(posedge clk);
        end
        m_rvalid <= 0; m_rlast <= 0;
      end
    end
  end

  // ---- one clustering run ----
  int unsigned init_c [MAXG][MAXK][MAXD];

  task automatic run_case(int kact, int max_iter, int seed_base);
    logic [31:0] v;
    int nres, tries, cyc;
    // data with no distance ties, so the result is unique
    tries = 0;
    do begin
      gen_data(G, NQ, DIM, 8, 32'h20000);
      for (int g = 0; g < G; g++)
        for (int k = 0; k < kact; k++)
          for (int d = 0; d < DIM; d++) begin
            cent[g][k][d]   = pts[g][k * 7][d];
            init_c[g][k][d] = pts[g][k * 7][d];
          end
      reference(kact, max_iter);
      tries++;
    end while (ties != 0 && tries < 10);
    if (ties != 0) $display("  note: %0d equal-distance pairs in the reference", ties);
    build_all();
    $display("case k=%0d max_iter=%0d: %0d nodes, level-1 passes %0d %0d %0d %0d, level-2 passes %0d",
             kact, max_iter, n_used, it1[0], it1[1], it1[2], it1[3], it2);

    wr(16'h0008, 32'(kact));
    wr(16'h000C, 32'(max_iter));
    for (int g = 0; g < G; g++) wr(16'(16'h0010 + 4 * g), 32'(root[g]));
    for (int g = 0; g < G; g++)
      for (int k = 0; k < kact; k++)
        for (int d = 0; d < DIM; d++)
          wr(16'(16'h4000 + 4 * ((g * K + k) * DIM + d)), init_c[g][k][d]);
    wr(16'h0000, 1);
    rd(16'h0004, v);
    check(v[0] == 1'b1, "busy after start");
    cyc = 0;
    while (!irq_done) begin @(posedge clk); cyc++; end
    $display("  run took %0d cycles", cyc);

    // results
    nres = 0;
    @(negedge clk);
    res_ready = 1;
    repeat (4 * K + 8) begin
      if (res_valid) begin
        int k;
        k = int'(res_data[RES_W-1 -: 8]);
        check(k == nres, $sformatf("result order, got cluster %0d", k));
        check(longint'(res_data[RES_W-9 -: CNT_W]) == fin_cnt[k],
              $sformatf("cluster %0d size %0d, expected %0d", k, res_data[RES_W-9 -: CNT_W], fin_cnt[k]));
        for (int d = 0; d < DIM; d++)
          check(res_data[d*COORD_W +: COORD_W] == cent[0][k][d],
                $sformatf("cluster %0d dim %0d centroid %0d, expected %0d", k, d,
                          res_data[d*COORD_W +: COORD_W], cent[0][k][d]));
        nres++;
      end
      @(negedge clk);
    end
    res_ready = 0;
    check(nres == kact, $sformatf("result count %0d", nres));

    for (int g = 0; g < G; g++) begin
      rd(16'(16'h0040 + 4 * g), v);
      check(int'(v) == it1[g], $sformatf("level-1 passes of quarter %0d: %0d, expected %0d", g, v, it1[g]));
    end
    rd(16'h0080, v);
    check(int'(v) == it2, $sformatf("level-2 passes %0d, expected %0d", v, it2));
    n_l2 += int'(v);
    rd(16'h0004, v);
    check(v[1:0] == 2'b10, "status done, not busy");
    check(v[2] == 1'b0, "no overflow");
    rd(16'h0084, v);
    check(v > 0 && int'(v) <= cyc + 4, "cycle counter");
    rd(16'(16'h4000 + 4 * ((0 * K + 1) * DIM + 3)), v);
    check(v == cent[0][1][3], "centroid window read-back");
  endtask

  int n_l1_conv = 0, n_limit = 0;

  initial begin
    logic [31:0] v;
    s_awvalid = 0; s_wvalid = 0; s_arvalid = 0; s_bready = 1; s_rready = 1;
    s_awaddr = 0; s_wdata = 0; s_araddr = 0;
    res_ready = 0;
    s_axis_tvalid = 0; s_axis_tdata = 0; m_axis_tready = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    run_case(K, 64, 1);
    for (int g = 0; g < G; g++) if (it1[g] < 64) n_l1_conv++;
    run_case(5, 2, 2);
    for (int g = 0; g < G; g++) if (it1[g] == 2) n_limit++;
    if (it2 == 2) n_limit++;

    // ---- DMA: 24 words host to card, then back ----
    begin
      logic [127:0] words [24];
      int got;
      for (int i = 0; i < 24; i++) words[i] = {$urandom, $urandom, $urandom, $urandom};
      wr(16'h00C0, 32'h0001_0000);
      wr(16'h00C4, 32'h0001_0000);
      wr(16'h00C8, 24);
      wr(16'h00CC, 1);
      for (int i = 0; i < 24; i++) begin
        s_axis_tvalid <= 1; s_axis_tdata <= words[i];
        @(posedge clk);
        while (!s_axis_tready) @(posedge clk);
      end
      s_axis_tvalid <= 0;
      while (dut.dma_wbusy) @(posedge clk);
      for (int i = 0; i < 24; i++)
        check(ddr.exists(32'h0001_0000 + 32'(16 * i)) &&
              {ddr[32'h0001_0000 + 32'(16 * i) + 8], ddr[32'h0001_0000 + 32'(16 * i)]} == words[i],
              $sformatf("DMA host-to-card word %0d", i));
      wr(16'h00CC, 2);
      got = 0;
      fork
        begin
          while (got < 24) begin
            m_axis_tready <= ($urandom % 2) != 0;
            @(posedge clk);
            if (m_axis_tvalid && m_axis_tready) begin
              check(m_axis_tdata == words[got], $sformatf("DMA card-to-host word %0d", got));
              check(m_axis_tlast == (got == 23), "DMA tlast");
              got++;
            end
          end
        end
        begin repeat (5000) @(posedge clk); end
      join_any
      disable fork;
      m_axis_tready <= 0;
      check(got == 24, "DMA card-to-host word count");
      repeat (5) @(posedge clk);
      rd(16'h0004, v);
      check(v[3] == 1'b0, "DMA idle");
    end

    $display("mechanisms: pruned=%0d whole=%0d leaves=%0d nodes=%0d l1_converged=%0d limit_stops=%0d merges=%0d l2_passes=%0d stalls=%0d",
             n_pruned, n_whole, n_leaf, n_push, n_l1_conv, n_limit, n_merge, n_l2, stalls);
    check(n_pruned > 0, "pruning happened");
    check(n_whole > 0, "whole-node assignment happened");
    check(n_leaf > 0, "leaf assignment happened");
    check(n_push > G, "children were visited");
    check(n_l1_conv > 0, "level-1 convergence happened");
    check(n_limit > 0, "pass-limit stop happened");
    check(n_merge == 2, "combine step ran once per run");
    check(n_l2 > 0, "level-2 passes happened");
    check(stalls > 0, "node-read stalls happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
