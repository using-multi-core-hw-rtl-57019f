// tb_bram_fifo: random pushes and pops against a queue model; checks order,
// level, full (in_ready low at DEPTH words) and empty (out_valid low).
module tb_bram_fifo;
  localparam int W = 40, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iv, ir, ov, orr;
  logic [W-1:0] id, od;
  logic [3:0] lvl;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0, fulls = 0;
  bit fired = 0;
  bram_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk(clk), .rst_n(rst_n), .in_valid(iv), .in_ready(ir), .in_data(id),
                                         .out_valid(ov), .out_ready(orr), .out_data(od), .level(lvl));
  task automatic check(bit ok, string w);
    checks++; if (!ok) begin failures++; $display("FAIL %s", w); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    iv = 0; orr = 0; id = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      check(int'(lvl) == q.size(), "level");
      check(ov == (q.size() != 0), "out_valid");
      check(ir == (q.size() < D), "in_ready");
      if (q.size() == D) fulls++;
      if (ov) check(od == q[0], "data order");
      if (!iv || fired) begin
        iv = (t < 1500) ? (($urandom % 4) != 0) : (($urandom % 4) == 0);
        id = {$urandom, 8'($urandom)};
      end
      orr = (t < 1500) ? (($urandom % 3) == 0) : (($urandom % 3) != 0);
      @(posedge clk);
      #1;
    end
    check(fulls > 0, "FIFO was full at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // model update at the clock edge, from the values the DUT saw
  always @(posedge clk) if (rst_n) begin
    if (ov && orr) void'(q.pop_front());
    fired = iv && ir;
    if (iv && ir) q.push_back(id);
  end
endmodule
