// tb_manhattan_dist: random points and centroids, including extreme values,
// against an L1 distance computed in the testbench with 64-bit integers.
module tb_manhattan_dist;
  import kmeans_pkg::*;
  localparam int DIM = DIM_DEF;
  coord_t [DIM-1:0] p, c;
  dist_t d;
  int checks = 0, failures = 0;
  manhattan_dist dut (.point(p), .cent(c), .l1_dist(d));
  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 500; t++) begin
      longint e;
      e = 0;
      for (int i = 0; i < DIM; i++) begin
        unique case (t % 4)
          0: begin p[i] = $urandom; c[i] = $urandom; end
          1: begin p[i] = '1; c[i] = '0; end
          2: begin p[i] = $urandom % 16; c[i] = $urandom % 16; end
          default: begin p[i] = $urandom; c[i] = p[i]; end
        endcase
        e += (p[i] > c[i]) ? longint'(p[i] - c[i]) : longint'(c[i] - p[i]);
      end
      #1;
      checks++;
      if (longint'(d) != e) begin failures++; $display("FAIL t=%0d got %0d exp %0d", t, d, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
