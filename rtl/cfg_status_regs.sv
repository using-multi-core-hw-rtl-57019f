// cfg_status_regs: configuration and status registers, an AXI4-Lite slave.
//
// The processor side programs a run through this register file and reads its
// results back.  32-bit registers, byte address:
//   0x000 CTRL      W  bit0: start a clustering run (pulse)
//   0x004 STATUS    R  bit0 busy, bit1 done (sticky until next start),
//                      bit2 stack overflow in a filtering engine,
//                      bit3 DMA busy
//   0x008 K_ACTIVE  RW number of clusters in use, 1..K (default K)
//   0x00C MAX_ITER  RW pass limit of each level (default 64)
//   0x010+4g ROOT   RW index of quarter g's kd-tree root node
//   0x040+4g L1_IT  R  level-1 passes of quarter g
//   0x080 L2_IT     R  level-2 passes
//   0x084 CYCLES    R  clock cycles of the last run
//   0x088 NODES     R  nodes visited in the last pass, all quarters
//   0x08C PRUNED    R  candidates pruned in the last pass, all quarters
//   0x0C0 DMA_WADDR RW byte address in DDR3 for host-to-card transfers
//   0x0C4 DMA_RADDR RW byte address in DDR3 for card-to-host transfers
//   0x0C8 DMA_LEN   RW transfer length in 128-bit words
//   0x0CC DMA_CTRL  W  bit0 start host-to-card, bit1 start card-to-host
//   0x4000 + 4*((g*K + k)*DIM + d)  RW  coordinate d of centroid k of quarter g
// The register file and its AXI4-Lite bus follow the paper; the map is this
// design's own.  A write needs address and data together and is answered
// with OKAY one cycle later; a read returns data one cycle after its address.
module cfg_status_regs
  import kmeans_pkg::*;
#(
  parameter int unsigned DIM    = DIM_DEF,
  parameter int unsigned K      = K_DEF,
  parameter int unsigned GROUPS = GROUPS_DEF,
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned GW = (GROUPS > 1) ? $clog2(GROUPS) : 1,
  localparam int unsigned DW = (DIM > 1) ? $clog2(DIM) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // AXI4-Lite slave
  input  logic [15:0]             s_awaddr,
  input  logic                    s_awvalid,
  output logic                    s_awready,
  input  logic [31:0]             s_wdata,
  input  logic                    s_wvalid,
  output logic                    s_wready,
  output logic [1:0]              s_bresp,
  output logic                    s_bvalid,
  input  logic                    s_bready,
  input  logic [15:0]             s_araddr,
  input  logic                    s_arvalid,
  output logic                    s_arready,
  output logic [31:0]             s_rdata,
  output logic [1:0]              s_rresp,
  output logic                    s_rvalid,
  input  logic                    s_rready,
  // configuration out
  output logic                    run_start,
  output logic [K-1:0]            k_mask,
  output logic [15:0]             max_iter,
  output addr_t [GROUPS-1:0]      root_addr,
  output logic [31:0]             dma_waddr,
  output logic [31:0]             dma_raddr,
  output logic [31:0]             dma_len,
  output logic                    dma_wstart,
  output logic                    dma_rstart,
  // centroid window
  output logic                    cent_we,
  output logic [GW-1:0]           cent_g,
  output logic [KW-1:0]           cent_k,
  output logic [DW-1:0]           cent_d,
  output coord_t                  cent_wdata,
  output logic [GW-1:0]           cent_rg,
  output logic [KW-1:0]           cent_rk,
  output logic [DW-1:0]           cent_rd,
  input  coord_t                  cent_rdata,
  // status in
  input  logic                    run_busy,
  input  logic                    run_done,
  input  logic                    eng_overflow,
  input  logic                    dma_busy,
  input  logic [GROUPS-1:0][15:0] l1_iters,
  input  logic [15:0]             l2_iters,
  input  logic [31:0]             st_nodes,
  input  logic [31:0]             st_pruned
);

  localparam logic [15:0] CENT_BASE = 16'h4000;
  localparam int unsigned N_CENT    = GROUPS * K * DIM;

  logic        done_q, ovf_q;
  logic [31:0] cycles;
  logic [31:0] k_active;

  // Split a centroid word index into quarter, cluster and dimension.
  function automatic void split(input logic [15:0] a, output logic [GW-1:0] g,
                                output logic [KW-1:0] k, output logic [DW-1:0] d);
    int unsigned w;
    w = 32'(a - CENT_BASE) >> 2;
    d = DW'(w % DIM);
    k = KW'((w / DIM) % K);
    g = GW'(w / (DIM * K));
  endfunction

  function automatic logic in_cent(input logic [15:0] a);
    return a >= CENT_BASE && (32'(a - CENT_BASE) >> 2) < N_CENT;
  endfunction

  always_comb begin
    for (int unsigned k = 0; k < K; k++) k_mask[k] = (k < k_active);
  end

  // ---- write channel ----
  logic wr_fire;
  assign s_awready = !s_bvalid && s_awvalid && s_wvalid;
  assign s_wready  = s_awready;
  assign wr_fire   = s_awready;
  assign s_bresp   = 2'b00;

  always_comb begin
    cent_we    = wr_fire && in_cent(s_awaddr);
    cent_wdata = coord_t'(s_wdata);
    split(s_awaddr, cent_g, cent_k, cent_d);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid   <= 1'b0;
      run_start  <= 1'b0;
      dma_wstart <= 1'b0;
      dma_rstart <= 1'b0;
      k_active   <= 32'(K);
      max_iter   <= 16'd64;
      root_addr  <= '0;
      dma_waddr  <= '0;
      dma_raddr  <= '0;
      dma_len    <= '0;
    end else begin
      run_start  <= 1'b0;
      dma_wstart <= 1'b0;
      dma_rstart <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        unique casez (s_awaddr)
          16'h0000: run_start <= s_wdata[0] && !run_busy;
          16'h0008: k_active  <= (s_wdata == 0 || s_wdata > K) ? 32'(K) : s_wdata;
          16'h000C: max_iter  <= (s_wdata[15:0] == 0) ? 16'd1 : s_wdata[15:0];
          16'h00C0: dma_waddr <= s_wdata;
          16'h00C4: dma_raddr <= s_wdata;
          16'h00C8: dma_len   <= s_wdata;
          16'h00CC: begin
            dma_wstart <= s_wdata[0];
            dma_rstart <= s_wdata[1];
          end
          default: begin
            for (int unsigned g = 0; g < GROUPS; g++)
              if (s_awaddr == 16'(16'h0010 + 4 * g)) root_addr[g] <= addr_t'(s_wdata);
          end
        endcase
      end
    end
  end

  // ---- read channel ----
  logic [31:0] rd_val;
  assign s_arready = !s_rvalid;
  assign s_rresp   = 2'b00;

  always_comb begin
    split(s_araddr, cent_rg, cent_rk, cent_rd);
    rd_val = 32'hDEAD_BEEF;
    unique casez (s_araddr)
      16'h0004: rd_val = {28'd0, dma_busy, ovf_q, done_q, run_busy};
      16'h0008: rd_val = k_active;
      16'h000C: rd_val = {16'd0, max_iter};
      16'h0080: rd_val = {16'd0, l2_iters};
      16'h0084: rd_val = cycles;
      16'h0088: rd_val = st_nodes;
      16'h008C: rd_val = st_pruned;
      16'h00C0: rd_val = dma_waddr;
      16'h00C4: rd_val = dma_raddr;
      16'h00C8: rd_val = dma_len;
      default: begin
        for (int unsigned g = 0; g < GROUPS; g++) begin
          if (s_araddr == 16'(16'h0010 + 4 * g)) rd_val = 32'(root_addr[g]);
          if (s_araddr == 16'(16'h0040 + 4 * g)) rd_val = {16'd0, l1_iters[g]};
        end
        if (in_cent(s_araddr)) rd_val = 32'(cent_rdata);
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
      done_q   <= 1'b0;
      ovf_q    <= 1'b0;
      cycles   <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        s_rdata  <= rd_val;
      end
      if (run_start) begin
        done_q <= 1'b0;
        ovf_q  <= 1'b0;
        cycles <= '0;
      end else begin
        if (run_done)     done_q <= 1'b1;
        if (eng_overflow) ovf_q  <= 1'b1;
        if (run_busy)     cycles <= cycles + 1;
      end
    end
  end

  // AXI4-Lite: a master keeps valid and its payload until the handshake.
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_awvalid && !s_awready |=> s_awvalid && $stable(s_awaddr));
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_arvalid && !s_arready |=> s_arvalid && $stable(s_araddr));

endmodule
