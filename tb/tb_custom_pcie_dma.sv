// tb_custom_pcie_dma: transfers of 24 and 5 words (three full bursts, and
// one partial burst) from the stream into a DDR3 model with random wready
// stalls, then back out with random tready stalls.  Checks memory contents,
// burst lengths and addresses, wlast/rlast framing, tlast, and that each
// 128-bit word becomes exactly two 64-bit beats.
module tb_custom_pcie_dma;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ws, rs, wb, rb;
  logic [31:0] wa, ra, ln;
  logic [127:0] s_axis_tdata, m_axis_tdata;
  logic s_axis_tvalid, s_axis_tready, m_axis_tvalid, m_axis_tready, m_axis_tlast;
  logic [31:0] m_awaddr, m_araddr;
  logic [7:0] m_awlen, m_arlen, m_wstrb;
  logic [2:0] m_awsize, m_arsize;
  logic [1:0] m_awburst, m_arburst, m_bresp, m_rresp;
  logic m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic [63:0] m_wdata, m_rdata;
  int checks = 0, failures = 0, wbeats = 0;
  logic [63:0] ddr [logic [31:0]];

  custom_pcie_dma dut (.clk(clk), .rst_n(rst_n), .wstart(ws), .rstart(rs), .waddr(wa), .raddr(ra), .len(ln),
    .wbusy(wb), .rbusy(rb), .*);

  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [31:0] exp_addr;
  int          exp_left;
  initial begin
    m_awready = 0; m_wready = 0; m_bvalid = 0; m_bresp = 0;
    forever begin
      logic [31:0] a; int n;
      @(posedge clk);
      if (rst_n && m_awvalid) begin
        m_awready <= 1; a = m_awaddr; n = int'(m_awlen) + 1;
        check(a == exp_addr, $sformatf("burst address %h exp %h", a, exp_addr));
        check(n == ((exp_left > 16) ? 16 : exp_left), $sformatf("burst length %0d", n));
        check(m_awsize == 3 && m_awburst == 1, "burst size and type");
        exp_addr += 128; exp_left -= n;
        @(posedge clk); m_awready <= 0;
        for (int i = 0; i < n; i++) begin
          m_wready <= ($urandom % 3) != 0;
          @(posedge clk);
          while (!(m_wvalid && m_wready)) begin m_wready <= ($urandom % 3) != 0; @(posedge clk); end
          ddr[a + 32'(8 * i)] = m_wdata;
          wbeats++;
          check(m_wlast == (i == n - 1), "wlast position");
          check(m_wstrb == 8'hFF, "wstrb");
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

  task automatic xfer(int n, logic [31:0] base);
    logic [127:0] words [32];
    int got;
    for (int i = 0; i < n; i++) words[i] = {$urandom, $urandom, $urandom, $urandom};
    exp_addr = base; exp_left = 2 * n; wbeats = 0;
    @(posedge clk); wa <= base; ra <= base; ln <= n; ws <= 1;
    @(posedge clk); ws <= 0;
    for (int i = 0; i < n; i++) begin
      s_axis_tvalid <= 1; s_axis_tdata <= words[i];
      @(posedge clk);
      while (!s_axis_tready) @(posedge clk);
    end
    s_axis_tvalid <= 0;
    while (wb) @(posedge clk);
    check(wbeats == 2 * n, $sformatf("%0d bus beats for %0d words", wbeats, n));
    for (int i = 0; i < n; i++)
      check(ddr.exists(base + 32'(16 * i)) && {ddr[base + 32'(16 * i) + 8], ddr[base + 32'(16 * i)]} == words[i],
            $sformatf("DDR word %0d", i));
    @(posedge clk); rs <= 1;
    @(posedge clk); rs <= 0;
    got = 0;
    while (got < n) begin
      m_axis_tready <= ($urandom % 2) != 0;
      @(posedge clk);
      if (m_axis_tvalid && m_axis_tready) begin
        check(m_axis_tdata == words[got], $sformatf("stream word %0d", got));
        check(m_axis_tlast == (got == n - 1), "tlast");
        got++;
      end
    end
    m_axis_tready <= 0;
    repeat (3) @(posedge clk);
    check(!rb && !wb, "idle after transfers");
  endtask

  initial begin
    ws = 0; rs = 0; wa = 0; ra = 0; ln = 0;
    s_axis_tvalid = 0; s_axis_tdata = 0; m_axis_tready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    xfer(24, 32'h0002_0000);
    xfer(5, 32'h0003_0080);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
