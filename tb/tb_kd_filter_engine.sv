// tb_kd_filter_engine: one filtering pass over the kd-tree of one quarter.
//
// Builds a tree of 200 blob-shaped points, picks K initial centroids, runs
// a pass with all candidates and one with a reduced candidate set, and
// compares the per-centroid sums and counts with a brute-force assignment of
// every point.  The node memory answers with random latency and stalls.  The
// statistics must add up: every point reaches exactly one centroid through a
// leaf or a whole-node assignment, and pruning must occur.
module tb_kd_filter_engine;
  import kmeans_pkg::*;
  import kmeans_tb_pkg::*;
  localparam int DIM = DIM_DEF, K = K_DEF, NW = node_width(DIM_DEF);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, req_v, req_r, rsp_v, rsp_r, busy, done, ovf;
  addr_t root_a, req_a;
  logic [K-1:0] cand;
  coord_t [K-1:0][DIM-1:0] cent_v;
  logic [NW-1:0] rsp_d;
  acc_t [K-1:0][DIM-1:0] aw;
  cnt_t [K-1:0] ac;
  logic [31:0] s_nodes, s_pruned, s_whole, s_leaves;
  int checks = 0, failures = 0;

  kd_filter_engine dut (.clk(clk), .rst_n(rst_n), .start(start), .root_addr(root_a), .cand_init(cand),
    .cent(cent_v), .node_req_valid(req_v), .node_req_ready(req_r), .node_req_addr(req_a),
    .node_rsp_valid(rsp_v), .node_rsp_ready(rsp_r), .node_rsp_data(rsp_d), .busy(busy), .done(done),
    .overflow(ovf), .acc_wgt(aw), .acc_cnt(ac), .st_nodes(s_nodes), .st_pruned(s_pruned),
    .st_whole(s_whole), .st_leaves(s_leaves));

  task automatic check(bit ok, string w);
    checks++; if (!ok) begin failures++; $display("FAIL %s", w); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // node memory
  initial begin
    addr_t a;
    req_r = 0; rsp_v = 0; rsp_d = '0;
    forever begin
      @(posedge clk);
      req_r <= ($urandom % 3) != 0;
      if (rst_n && req_v && req_r) begin
        a = req_a; req_r <= 0;
        repeat (1 + $urandom % 3) @(posedge clk);
        rsp_v <= 1; rsp_d <= pack_node(int'(a));
        @(posedge clk);
        while (!rsp_r) @(posedge clk);
        rsp_v <= 0;
      end
    end
  end

  task automatic one_pass(logic [K-1:0] m);
    int kact;
    kact = 0;
    for (int k = 0; k < K; k++) if (m[k]) kact = k + 1;
    @(negedge clk);
    cand = m; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    // brute force, only candidates in m
    begin
      longint ew [K][DIM];
      longint ec [K];
      for (int k = 0; k < K; k++) begin ec[k] = 0; for (int d = 0; d < DIM; d++) ew[k][d] = 0; end
      for (int i = 0; i < nq; i++) begin
        longint best, dd; int bk;
        best = -1; bk = 0;
        for (int k = 0; k < K; k++) if (m[k]) begin
          dd = l1(pts[0][i], cent[0][k]);
          if (best < 0 || dd < best) begin best = dd; bk = k; end
        end
        ec[bk]++;
        for (int d = 0; d < DIM; d++) ew[bk][d] += pts[0][i][d];
      end
      for (int k = 0; k < K; k++) begin
        check(longint'(ac[k]) == ec[k], $sformatf("count of centroid %0d: %0d exp %0d", k, ac[k], ec[k]));
        for (int d = 0; d < DIM; d++)
          check(longint'(aw[k][d]) == ew[k][d], $sformatf("sum of centroid %0d dim %0d", k, d));
      end
    end
    check(!ovf, "no stack overflow");
    begin
      longint tot; tot = 0;
      for (int k = 0; k < K; k++) tot += longint'(ac[k]);
      check(tot == longint'(nq), "every point assigned once");
    end
    check(s_pruned > 0, "pruning occurred");
    check(s_whole > 0, "whole-node assignment occurred");
    check(int'(s_nodes) < 2 * nq - 1 || m == K'(1), "filtering visited fewer nodes than the tree has");
    $display("pass mask=%h: nodes=%0d pruned=%0d whole=%0d leaves=%0d", m, s_nodes, s_pruned, s_whole, s_leaves);
  endtask

  initial begin
    start = 0; cand = '0; root_a = '0;
    gen_data(1, 200, DIM, 6, 32'h8000);
    build_all();
    for (int k = 0; k < K; k++)
      for (int d = 0; d < DIM; d++) begin
        cent[0][k][d] = pts[0][k * 9][d];
        cent_v[k][d]  = pts[0][k * 9][d];
      end
    root_a = addr_t'(root[0]);
    repeat (3) @(negedge clk);
    rst_n = 1;
    one_pass('1);
    one_pass(K'(32'h000F_0F0F));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
