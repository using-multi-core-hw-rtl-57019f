// custom_pcie_dma: the DMA engine between the PCIe stream and DDR3.
//
// Host-to-card: 128-bit words arriving on the AXI4-Stream from the PCIe
// multi-channel DMA's FIFO are written to DDR3 from byte address waddr on, as
// AXI4 INCR bursts on a 64-bit bus; each stream word becomes two bus beats,
// low half first, and a burst carries up to BURST 64-bit beats.  The last
// burst waits for its write response before wbusy falls.
// Card-to-host: len 128-bit words are read from DDR3 at raddr by AXI4 bursts
// and sent on the outgoing AXI4-Stream, two bus beats per word, tlast on the
// final word.
// The 128-bit stream and the 64-bit AXI bus between the DMA and DDR3 are the
// paper's; the burst length, the ordering of halves and the requirement that
// addresses are BURST*8-byte aligned (so no burst crosses a 4 KB boundary)
// are this design's own choices.
//
// Interface: wstart/rstart (pulse) with waddr/raddr and len start a transfer;
// wbusy/rbusy stay high until it has finished.  One burst is in flight per
// direction at a time.
module custom_pcie_dma #(
  parameter int unsigned BURST = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wstart,
  input  logic         rstart,
  input  logic [31:0]  waddr,
  input  logic [31:0]  raddr,
  input  logic [31:0]  len,
  output logic         wbusy,
  output logic         rbusy,
  // AXI4-Stream from the PCIe side (host to card)
  input  logic [127:0] s_axis_tdata,
  input  logic         s_axis_tvalid,
  output logic         s_axis_tready,
  // AXI4-Stream to the PCIe side (card to host)
  output logic [127:0] m_axis_tdata,
  output logic         m_axis_tvalid,
  input  logic         m_axis_tready,
  output logic         m_axis_tlast,
  // AXI4 master, 64-bit, to DDR3
  output logic [31:0]  m_awaddr,
  output logic [7:0]   m_awlen,
  output logic [2:0]   m_awsize,
  output logic [1:0]   m_awburst,
  output logic         m_awvalid,
  input  logic         m_awready,
  output logic [63:0]  m_wdata,
  output logic [7:0]   m_wstrb,
  output logic         m_wlast,
  output logic         m_wvalid,
  input  logic         m_wready,
  input  logic [1:0]   m_bresp,
  input  logic         m_bvalid,
  output logic         m_bready,
  output logic [31:0]  m_araddr,
  output logic [7:0]   m_arlen,
  output logic [2:0]   m_arsize,
  output logic [1:0]   m_arburst,
  output logic         m_arvalid,
  input  logic         m_arready,
  input  logic [63:0]  m_rdata,
  input  logic [1:0]   m_rresp,
  input  logic         m_rlast,
  input  logic         m_rvalid,
  output logic         m_rready
);

  // ---------------- host to card ----------------
  typedef enum logic [1:0] { W_IDLE, W_ADDR, W_DATA, W_RESP } wstate_e;
  wstate_e      ws;
  logic [31:0]  w_left;     // 64-bit beats still to write
  logic [31:0]  w_addr;
  logic [8:0]   w_beats;    // beats in the current burst
  logic [8:0]   w_cnt;
  logic         w_half;     // 0: low half of the stream word, 1: high half

  assign m_awsize  = 3'd3;
  assign m_awburst = 2'b01;
  assign m_wstrb   = 8'hFF;
  assign m_awaddr  = w_addr;
  assign w_beats   = (w_left > BURST) ? 9'(BURST) : 9'(w_left);
  assign m_awlen   = 8'(w_beats - 1'b1);
  assign m_awvalid = (ws == W_ADDR);
  assign m_wvalid  = (ws == W_DATA) && s_axis_tvalid;
  assign m_wdata   = w_half ? s_axis_tdata[127:64] : s_axis_tdata[63:0];
  assign m_wlast   = (w_cnt == w_beats - 1'b1);
  assign s_axis_tready = (ws == W_DATA) && m_wready && w_half;
  assign m_bready  = (ws == W_RESP);
  assign wbusy     = (ws != W_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws      <= W_IDLE;
      w_left  <= '0;
      w_addr  <= '0;
      w_cnt   <= '0;
      w_half  <= 1'b0;
    end else begin
      unique case (ws)
        W_IDLE: if (wstart && len != 0) begin
          w_left <= len << 1;
          w_addr <= waddr;
          ws     <= W_ADDR;
        end
        W_ADDR: if (m_awready) begin
          w_cnt  <= '0;
          w_half <= 1'b0;
          ws     <= W_DATA;
        end
        W_DATA: if (m_wvalid && m_wready) begin
          w_half <= !w_half;
          w_cnt  <= w_cnt + 1'b1;
          if (m_wlast) ws <= W_RESP;
        end
        W_RESP: if (m_bvalid) begin
          w_left <= w_left - 32'(w_beats);
          w_addr <= w_addr + 32'(BURST * 8);
          ws     <= (w_left == 32'(w_beats)) ? W_IDLE : W_ADDR;
        end
        default: ws <= W_IDLE;
      endcase
    end
  end

  // ---------------- card to host ----------------
  typedef enum logic [1:0] { R_IDLE, R_ADDR, R_DATA } rstate_e;
  rstate_e      rs;
  logic [31:0]  r_left;     // 64-bit beats still to read
  logic [31:0]  r_addr;
  logic [8:0]   r_beats;
  logic [63:0]  r_low;
  logic         r_half;
  logic [31:0]  r_words;    // 128-bit words still to send

  assign m_arsize  = 3'd3;
  assign m_arburst = 2'b01;
  assign m_araddr  = r_addr;
  assign r_beats   = (r_left > BURST) ? 9'(BURST) : 9'(r_left);
  assign m_arlen   = 8'(r_beats - 1'b1);
  assign m_arvalid = (rs == R_ADDR);
  assign m_axis_tdata  = {m_rdata, r_low};
  assign m_axis_tvalid = (rs == R_DATA) && m_rvalid && r_half;
  assign m_axis_tlast  = (r_words == 1);
  assign m_rready      = (rs == R_DATA) && (!r_half || m_axis_tready);
  assign rbusy         = (rs != R_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs      <= R_IDLE;
      r_left  <= '0;
      r_addr  <= '0;
      r_low   <= '0;
      r_half  <= 1'b0;
      r_words <= '0;
    end else begin
      unique case (rs)
        R_IDLE: if (rstart && len != 0) begin
          r_left  <= len << 1;
          r_words <= len;
          r_addr  <= raddr;
          r_half  <= 1'b0;
          rs      <= R_ADDR;
        end
        R_ADDR: if (m_arready) begin
          rs <= R_DATA;
        end
        R_DATA: if (m_rvalid && m_rready) begin
          r_half <= !r_half;
          if (!r_half) r_low <= m_rdata;
          else         r_words <= r_words - 1;
          if (m_rlast) begin
            r_left <= r_left - 32'(r_beats);
            r_addr <= r_addr + 32'(BURST * 8);
            rs     <= (r_left == 32'(r_beats)) ? R_IDLE : R_ADDR;
          end
        end
        default: rs <= R_IDLE;
      endcase
    end
  end

  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_awvalid && !m_awready |=> m_awvalid && $stable(m_awaddr) && $stable(m_awlen));
  a_w_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_wvalid && !m_wready |=> m_wvalid);
  a_axis_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata));

endmodule
