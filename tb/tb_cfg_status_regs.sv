// tb_cfg_status_regs: AXI4-Lite writes and reads of every register: start
// pulse, cluster number (with clamping of 0 and of values above K), pass
// limit, tree roots, DMA registers and pulses, the centroid window (write
// decode and read address split), sticky done/overflow and the cycle
// counter.
module tb_cfg_status_regs;
  import kmeans_pkg::*;
  localparam int DIM = DIM_DEF, K = K_DEF, G = GROUPS_DEF;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [15:0] awa, ara;
  logic awv, awr, wv, wr_, bv, br, arv, arr, rv, rr;
  logic [31:0] wd, rdt;
  logic [1:0] bresp, rresp;
  logic rs, dws, drs, cwe, rbusy, rdone, eovf, dbusy;
  logic [K-1:0] km;
  logic [15:0] mi, l2;
  addr_t [G-1:0] ra;
  logic [31:0] dwa, dra, dl, nodes, pruned;
  logic [1:0] cg, crg; logic [4:0] ck, crk; logic [3:0] cd, crd;
  coord_t cwd, crdata;
  logic [G-1:0][15:0] l1;
  int checks = 0, failures = 0, starts = 0, dwst = 0, drst = 0;
  cfg_status_regs dut (.clk(clk), .rst_n(rst_n), .s_awaddr(awa), .s_awvalid(awv), .s_awready(awr),
    .s_wdata(wd), .s_wvalid(wv), .s_wready(wr_), .s_bresp(bresp), .s_bvalid(bv), .s_bready(br),
    .s_araddr(ara), .s_arvalid(arv), .s_arready(arr), .s_rdata(rdt), .s_rresp(rresp), .s_rvalid(rv),
    .s_rready(rr), .run_start(rs), .k_mask(km), .max_iter(mi), .root_addr(ra), .dma_waddr(dwa),
    .dma_raddr(dra), .dma_len(dl), .dma_wstart(dws), .dma_rstart(drs), .cent_we(cwe), .cent_g(cg),
    .cent_k(ck), .cent_d(cd), .cent_wdata(cwd), .cent_rg(crg), .cent_rk(crk), .cent_rd(crd),
    .cent_rdata(crdata), .run_busy(rbusy), .run_done(rdone), .eng_overflow(eovf), .dma_busy(dbusy),
    .l1_iters(l1), .l2_iters(l2), .st_nodes(nodes), .st_pruned(pruned));
  // a fake centroid memory answering the read split
  assign crdata = coord_t'({crg, 8'(crk), 8'(crd)}) + 32'h1000_0000;
  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  logic [1:0] lg; logic [4:0] lk; logic [3:0] ld; logic [31:0] lw; int ncw = 0;
  always @(posedge clk) begin
    if (rst_n && rs) starts++;
    if (rst_n && dws) dwst++;
    if (rst_n && drs) drst++;
    if (rst_n && cwe) begin lg = cg; lk = ck; ld = cd; lw = cwd; ncw++; end
  end
  task automatic w(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); awa = a; wd = d; awv = 1; wv = 1;
    do @(posedge clk); while (!awr);
    @(negedge clk); awv = 0; wv = 0;
    check(bv && bresp == 0, "write response");
    @(negedge clk);
  endtask
  task automatic r(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); ara = a; arv = 1;
    do @(posedge clk); while (!arr);
    @(negedge clk); arv = 0;
    while (!rv) @(negedge clk);
    d = rdt;
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [31:0] v;
    awv = 0; wv = 0; arv = 0; br = 1; rr = 1; awa = 0; ara = 0; wd = 0;
    rbusy = 0; rdone = 0; eovf = 0; dbusy = 0; nodes = 32'd1234; pruned = 32'd77; l2 = 16'd9;
    for (int g = 0; g < G; g++) l1[g] = 16'(g + 3);
    repeat (3) @(negedge clk);
    rst_n = 1;
    r(16'h0008, v); check(v == K, "K_ACTIVE reset value");
    check(km == '1, "all clusters enabled at reset");
    w(16'h0008, 5); r(16'h0008, v); check(v == 5, "K_ACTIVE 5");
    check(km == K'(5'b11111), "mask of 5 clusters");
    w(16'h0008, 0); r(16'h0008, v); check(v == K, "K_ACTIVE 0 clamps to K");
    w(16'h0008, 99); r(16'h0008, v); check(v == K, "K_ACTIVE too large clamps to K");
    w(16'h000C, 7); r(16'h000C, v); check(v == 7 && mi == 7, "MAX_ITER");
    for (int g = 0; g < G; g++) w(16'(16'h10 + 4 * g), 32'(100 * g + 1));
    for (int g = 0; g < G; g++) begin
      r(16'(16'h10 + 4 * g), v); check(v == 100 * g + 1 && ra[g] == addr_t'(100 * g + 1), "ROOT");
      r(16'(16'h40 + 4 * g), v); check(v == g + 3, "L1_IT");
    end
    r(16'h0080, v); check(v == 9, "L2_IT");
    r(16'h0088, v); check(v == 1234, "NODES");
    r(16'h008C, v); check(v == 77, "PRUNED");
    w(16'h00C0, 32'hA000); w(16'h00C4, 32'hB000); w(16'h00C8, 24);
    check(dwa == 32'hA000 && dra == 32'hB000 && dl == 24, "DMA registers");
    w(16'h00CC, 1); w(16'h00CC, 2);
    check(dwst == 1 && drst == 1, $sformatf("DMA start pulses %0d %0d", dwst, drst));
    // centroid window
    for (int t = 0; t < 20; t++) begin
      int g, k, d;
      g = $urandom % G; k = $urandom % K; d = $urandom % DIM;
      w(16'(16'h4000 + 4 * ((g * K + k) * DIM + d)), 32'(t + 500));
      check(int'(lg) == g && int'(lk) == k && int'(ld) == d && lw == 32'(t + 500), "centroid write decode");
      r(16'(16'h4000 + 4 * ((g * K + k) * DIM + d)), v);
      check(v == coord_t'({2'(g), 8'(k), 8'(d)}) + 32'h1000_0000, "centroid read split");
    end
    check(ncw == 20, $sformatf("centroid writes only from the window %0d", ncw));
    // run control and sticky status
    w(16'h0000, 1); check(starts == 1, "start pulse");
    rbusy = 1; repeat (10) @(negedge clk); eovf = 1; @(negedge clk); eovf = 0;
    r(16'h0004, v); check(v[0] && !v[1] && v[2], "busy, overflow sticky");
    rdone = 1; @(negedge clk); rdone = 0; rbusy = 0;
    r(16'h0004, v); check(!v[0] && v[1], "done sticky");
    r(16'h0084, v); check(v >= 10 && v < 40, $sformatf("cycle counter %0d", v));
    rbusy = 1; w(16'h0000, 1); check(starts == 1, "no start while busy"); rbusy = 0;
    dbusy = 1; r(16'h0004, v); check(v[3], "DMA busy bit"); dbusy = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
