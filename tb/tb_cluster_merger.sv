// tb_cluster_merger: random centroids, sums and counts for four quarters
// against a testbench model that joins cluster k of quarter 0 with the
// nearest (L1) enabled cluster of each other quarter.  Checks the joined
// sums, that disabled clusters stay as quarter 0's, and the cycle count
// K * (GROUPS - 1) + 1.
module tb_cluster_merger;
  import kmeans_pkg::*;
  localparam int DIM = DIM_DEF, K = K_DEF, G = GROUPS_DEF;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done;
  logic [K-1:0] km;
  coord_t [G-1:0][K-1:0][DIM-1:0] ce;
  acc_t [G-1:0][K-1:0][DIM-1:0] w;
  cnt_t [G-1:0][K-1:0] c;
  acc_t [K-1:0][DIM-1:0] mw;
  cnt_t [K-1:0] mc;
  int checks = 0, failures = 0;
  cluster_merger dut (.clk(clk), .rst_n(rst_n), .start(start), .k_mask(km), .cent(ce), .wgt(w), .cnt(c),
                      .busy(busy), .done(done), .m_wgt(mw), .m_cnt(mc));
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  function automatic longint dl1(coord_t [DIM-1:0] a, coord_t [DIM-1:0] b);
    longint s; s = 0;
    for (int d = 0; d < DIM; d++) s += (a[d] > b[d]) ? longint'(a[d] - b[d]) : longint'(b[d] - a[d]);
    return s;
  endfunction
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    start = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5; t++) begin
      int cyc;
      for (int k = 0; k < K; k++) km[k] = (t == 0) || (k < 3 + t * 3);
      for (int g = 0; g < G; g++)
        for (int k = 0; k < K; k++) begin
          c[g][k] = cnt_t'($urandom % 1000);
          for (int d = 0; d < DIM; d++) begin
            ce[g][k][d] = coord_t'($urandom % 32'h0010_0000);
            w[g][k][d] = acc_t'($urandom);
          end
        end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc == K * (G - 1) + 1, $sformatf("cycles %0d", cyc));
      for (int k = 0; k < K; k++) begin
        longint ec; longint ew [DIM];
        ec = c[0][k];
        for (int d = 0; d < DIM; d++) ew[d] = w[0][k][d];
        if (km[k])
          for (int g = 1; g < G; g++) begin
            longint best, dd; int bj;
            best = -1; bj = 0;
            for (int j = 0; j < K; j++) if (km[j]) begin
              dd = dl1(ce[0][k], ce[g][j]);
              if (best < 0 || dd < best) begin best = dd; bj = j; end
            end
            ec += c[g][bj];
            for (int d = 0; d < DIM; d++) ew[d] += w[g][bj][d];
          end
        check(longint'(mc[k]) == ec, $sformatf("round %0d joined count %0d", t, k));
        for (int d = 0; d < DIM; d++) check(longint'(mw[k][d]) == ew[d], $sformatf("joined sum %0d/%0d", k, d));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
