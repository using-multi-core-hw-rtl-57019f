// tb_dist_calc_array: K points against K centroids each cycle; every core's
// registered distance must equal the L1 distance of the previous cycle's
// inputs (one-cycle latency).
module tb_dist_calc_array;
  import kmeans_pkg::*;
  localparam int DIM = DIM_DEF, K = K_DEF;
  logic clk = 0;
  always #5 clk = ~clk;
  coord_t [K-1:0][DIM-1:0] p, c;
  dist_t  [K-1:0] d;
  longint exp_q [K];
  int checks = 0, failures = 0;
  dist_calc_array dut (.clk(clk), .point(p), .cent(c), .l1_dist(d));
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      if (t > 0)
        for (int k = 0; k < K; k++) begin
          checks++;
          if (longint'(d[k]) != exp_q[k]) begin failures++; $display("FAIL t=%0d core %0d", t, k); end
        end
      for (int k = 0; k < K; k++) begin
        exp_q[k] = 0;
        for (int i = 0; i < DIM; i++) begin
          p[k][i] = $urandom % (1 << (t % 32)); c[k][i] = $urandom;
          exp_q[k] += (p[k][i] > c[k][i]) ? longint'(p[k][i] - c[k][i]) : longint'(c[k][i] - p[k][i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
