// tb_dist_compare: random candidate masks and distances (with many equal
// values) against a testbench model of the masked argmin (lowest index on
// ties) and of the pruning rule (remove z != z* when dist_s <= dist_z).
module tb_dist_compare;
  import kmeans_pkg::*;
  localparam int K = K_DEF;
  localparam int KW = $clog2(K);
  logic [K-1:0] mask, nm;
  dist_t [K-1:0] dm, dz, ds;
  logic [KW-1:0] zs, zin;
  logic any, single;
  logic [KW:0] np;
  int checks = 0, failures = 0;
  dist_compare dut (.mask(mask), .dist_mid(dm), .zstar(zs), .any(any), .zstar_in(zin),
                    .dist_z(dz), .dist_s(ds), .new_mask(nm), .single(single), .n_pruned(np));
  task automatic check(bit ok, string w);
    checks++; if (!ok) begin failures++; $display("FAIL %s", w); end
  endtask
  initial begin
    #1000000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 2000; t++) begin
      int ez, cnt, npr; bit ea; logic [K-1:0] em; longint best;
      mask = K'({$urandom, $urandom});
      if (t % 5 == 0) mask = K'(1) << ($urandom % K);
      if (t % 17 == 0) mask = '0;
      for (int k = 0; k < K; k++) begin
        dm[k] = dist_t'($urandom % 64); dz[k] = dist_t'($urandom % 8); ds[k] = dist_t'($urandom % 8);
      end
      zin = KW'($urandom % K);
      #1;
      ea = 0; ez = 0; best = 0;
      for (int k = 0; k < K; k++)
        if (mask[k] && (!ea || longint'(dm[k]) < best)) begin ea = 1; ez = k; best = longint'(dm[k]); end
      check(any == ea, "any");
      if (ea) check(int'(zs) == ez, $sformatf("zstar %0d exp %0d", zs, ez));
      em = mask; npr = 0; cnt = 0;
      for (int k = 0; k < K; k++) begin
        if (mask[k] && k != int'(zin) && ds[k] <= dz[k]) begin em[k] = 0; npr++; end
        if (em[k]) cnt++;
      end
      check(nm == em, "new_mask");
      check(int'(np) == npr, "n_pruned");
      check(single == (cnt == 1), "single");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
