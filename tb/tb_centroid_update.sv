// tb_centroid_update: random sums and counts (some counts zero, some clusters
// disabled) against means computed in the testbench; checks every written
// centroid, that empty and disabled clusters are not written, the changed
// flag, and the cycle count: ACC_W + 2 cycles per divided cluster, one per
// other cluster.
module tb_centroid_update;
  import kmeans_pkg::*;
  localparam int DIM = DIM_DEF, K = K_DEF;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, changed, we;
  logic [K-1:0] km;
  acc_t [K-1:0][DIM-1:0] w;
  cnt_t [K-1:0] c;
  coord_t [K-1:0][DIM-1:0] old;
  logic [$clog2(K)-1:0] wk;
  coord_t [DIM-1:0] nv;
  int checks = 0, failures = 0;
  int writes [K];
  centroid_update dut (.clk(clk), .rst_n(rst_n), .start(start), .k_mask(km), .wgt(w), .cnt(c), .cent_old(old),
                       .busy(busy), .done(done), .changed(changed), .cent_we(we), .cent_k(wk), .cent_new(nv));
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && we) begin
    writes[wk]++;
    for (int d = 0; d < DIM; d++)
      check(longint'(nv[d]) == longint'(w[wk][d]) / longint'(c[wk]),
            $sformatf("mean of cluster %0d dim %0d: %0d", wk, d, nv[d]));
  end
  initial begin
    start = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      int cyc, exp_cyc; bit exp_ch;
      exp_cyc = 0; exp_ch = 0;
      for (int k = 0; k < K; k++) begin
        writes[k] = 0;
        km[k] = (t == 0) || ($urandom % 4 != 0);
        c[k]  = (k % 5 == 3) ? 0 : cnt_t'(1 + $urandom % 5000);
        for (int d = 0; d < DIM; d++) begin
          w[k][d] = acc_t'(c[k]) * acc_t'($urandom % 32'h0100_0000) + acc_t'($urandom % 1000);
          old[k][d] = (c[k] != 0) ? coord_t'(w[k][d] / acc_t'(c[k])) : coord_t'($urandom);
        end
        if (t >= 2 && k == 5 * t - 3) begin km[k] = 1; old[k][3] = old[k][3] + 1; exp_ch = 1; end
        exp_cyc += (km[k] && c[k] != 0) ? ACC_W + 2 : 1;
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      @(posedge clk); #1;
      check(changed == exp_ch, $sformatf("changed flag round %0d", t));
      check(cyc == exp_cyc + 1, $sformatf("cycles %0d expected %0d", cyc, exp_cyc + 1));
      for (int k = 0; k < K; k++)
        check(writes[k] == ((km[k] && c[k] != 0) ? 1 : 0), $sformatf("writes of cluster %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
