// tb_two_level_ctrl: the sequencer against scripted engines and update
// units.  Quarter g reports "changed" for its first 2+g level-1 updates, and
// the shared level-2 update reports "changed" three times, so the expected
// pass counts are known; a second run uses a pass limit of 2.  Checks the
// order of the phases (no combine before every quarter has converged, level 2
// only after the combine update), the pass counters and the done pulse.
module tb_two_level_ctrl;
  import kmeans_pkg::*;
  localparam int G = GROUPS_DEF;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, ms, md, os, od;
  logic [15:0] maxit;
  phase_e ph;
  logic [G-1:0] es, ed, us, ud, uc;
  logic [G-1:0][15:0] l1;
  logic [15:0] l2;
  int checks = 0, failures = 0;
  int n_upd [G];
  int n_l2upd, merges, eng_starts;
  two_level_ctrl dut (.clk(clk), .rst_n(rst_n), .start(start), .max_iter(maxit), .phase(ph),
    .eng_start(es), .eng_done(ed), .upd_start(us), .upd_done(ud), .upd_changed(uc),
    .merge_start(ms), .merge_done(md), .out_start(os), .out_done(od), .busy(busy), .done(done),
    .l1_iters(l1), .l2_iters(l2));
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // scripted units: done a few cycles after start
  for (genvar g = 0; g < G; g++) begin : g_u
    initial begin
      ed[g] = 0;
      forever begin
        @(posedge clk);
        if (rst_n && es[g]) begin
          eng_starts++;
          repeat (3 + g) @(posedge clk);
          ed[g] <= 1; @(posedge clk); ed[g] <= 0;
        end
      end
    end
    initial begin
      ud[g] = 0; uc[g] = 0;
      forever begin
        @(posedge clk);
        if (rst_n && us[g]) begin
          repeat (2 + 2 * g) @(posedge clk);
          if (ph == PH_LEVEL1) begin
            n_upd[g]++;
            uc[g] <= (n_upd[g] <= 2 + g);
          end else if (ph == PH_LEVEL2) begin
            n_l2upd++;
            uc[g] <= (n_l2upd <= 3);
          end else uc[g] <= 1;
          ud[g] <= 1; @(posedge clk); ud[g] <= 0;
        end
      end
    end
  end
  initial begin
    md = 0; od = 0;
    forever begin
      @(posedge clk);
      if (rst_n && ms) begin
        merges++;
        check(ph == PH_MERGE, "combine in merge phase");
        for (int g = 0; g < G; g++) check(!dut.active[g], "combine only after all quarters converged");
        repeat (4) @(posedge clk); md <= 1; @(posedge clk); md <= 0;
      end
      if (rst_n && os) begin
        check(ph == PH_LEVEL2, "output after level 2");
        repeat (2) @(posedge clk); od <= 1; @(posedge clk); od <= 0;
      end
    end
  end
  task automatic run(int mi, int e1 [G], int e2);
    for (int g = 0; g < G; g++) n_upd[g] = 0;
    n_l2upd = 0; merges = 0;
    @(negedge clk); maxit = 16'(mi); start = 1;
    @(negedge clk); start = 0;
    check(busy, "busy");
    while (!done) @(negedge clk);
    for (int g = 0; g < G; g++) check(int'(l1[g]) == e1[g], $sformatf("level-1 passes q%0d = %0d exp %0d", g, l1[g], e1[g]));
    check(int'(l2) == e2, $sformatf("level-2 passes %0d exp %0d", l2, e2));
    check(merges == 1, "one combine");
    @(negedge clk);
    check(!busy, "idle after done");
  endtask
  initial begin
    int e1 [G];
    start = 0; maxit = 64; eng_starts = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < G; g++) e1[g] = 3 + g;
    run(64, e1, 4);
    for (int g = 0; g < G; g++) e1[g] = 2;
    run(2, e1, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
