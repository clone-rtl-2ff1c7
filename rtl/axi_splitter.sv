// axi_splitter: one AXI4-Lite slave port from the host link, two master ports, one
// for the LPU register partition and one for the SFU partition.
//
// The partition is chosen by one address bit (SEL_BIT, default bit 31: 0 = LPU,
// 1 = SFU). Writes and reads are handled by two independent one-deep trackers: an
// address handshake is forwarded to the selected partition and locks that choice
// until the matching B (or R) response has been returned, so at most one write and
// one read are outstanding. Write data is forwarded only after its address has been
// accepted. All forwarding is combinational, so the splitter adds no latency.
// The paper states only that an AXI splitter steers instructions and data to the
// LPU and SFU partitions; the bus flavour, the address split and the one-outstanding
// rule are this design's choices.
module axi_splitter #(
  parameter int unsigned SEL_BIT = 31
) (
  input  logic clk,
  input  logic rst_n,
  axi_lite_if.slave  s,
  axi_lite_if.master m_lpu,
  axi_lite_if.master m_sfu
);
  // ---------------- write side ----------------
  logic wr_busy, wr_sel, w_done;
  logic aw_sel;
  assign aw_sel = s.awaddr[SEL_BIT];

  always_comb begin
    m_lpu.awaddr  = s.awaddr;
    m_sfu.awaddr  = s.awaddr;
    m_lpu.awvalid = s.awvalid && !wr_busy && !aw_sel;
    m_sfu.awvalid = s.awvalid && !wr_busy &&  aw_sel;
    s.awready     = !wr_busy && (aw_sel ? m_sfu.awready : m_lpu.awready);

    m_lpu.wdata   = s.wdata;
    m_sfu.wdata   = s.wdata;
    m_lpu.wvalid  = s.wvalid && wr_busy && !w_done && !wr_sel;
    m_sfu.wvalid  = s.wvalid && wr_busy && !w_done &&  wr_sel;
    s.wready      = wr_busy && !w_done && (wr_sel ? m_sfu.wready : m_lpu.wready);

    s.bvalid      = wr_busy && (wr_sel ? m_sfu.bvalid : m_lpu.bvalid);
    s.bresp       = wr_sel ? m_sfu.bresp : m_lpu.bresp;
    m_lpu.bready  = s.bready && wr_busy && !wr_sel;
    m_sfu.bready  = s.bready && wr_busy &&  wr_sel;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_busy <= 1'b0;
      wr_sel  <= 1'b0;
      w_done  <= 1'b0;
    end else begin
      if (s.awvalid && s.awready) begin
        wr_busy <= 1'b1;
        wr_sel  <= aw_sel;
        w_done  <= 1'b0;
      end
      if (s.wvalid && s.wready) w_done <= 1'b1;
      if (s.bvalid && s.bready) wr_busy <= 1'b0;
    end
  end

  // ---------------- read side ----------------
  logic rd_busy, rd_sel;
  logic ar_sel;
  assign ar_sel = s.araddr[SEL_BIT];

  always_comb begin
    m_lpu.araddr  = s.araddr;
    m_sfu.araddr  = s.araddr;
    m_lpu.arvalid = s.arvalid && !rd_busy && !ar_sel;
    m_sfu.arvalid = s.arvalid && !rd_busy &&  ar_sel;
    s.arready     = !rd_busy && (ar_sel ? m_sfu.arready : m_lpu.arready);

    s.rvalid      = rd_busy && (rd_sel ? m_sfu.rvalid : m_lpu.rvalid);
    s.rdata       = rd_sel ? m_sfu.rdata : m_lpu.rdata;
    s.rresp       = rd_sel ? m_sfu.rresp : m_lpu.rresp;
    m_lpu.rready  = s.rready && rd_busy && !rd_sel;
    m_sfu.rready  = s.rready && rd_busy &&  rd_sel;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_busy <= 1'b0;
      rd_sel  <= 1'b0;
    end else begin
      if (s.arvalid && s.arready) begin
        rd_busy <= 1'b1;
        rd_sel  <= ar_sel;
      end
      if (s.rvalid && s.rready) rd_busy <= 1'b0;
    end
  end

  // AXI rule: a valid address may not be withdrawn before it is accepted.
  property p_aw_stable;
    @(posedge clk) disable iff (!rst_n) (s.awvalid && !s.awready) |=> s.awvalid;
  endproperty
  assert property (p_aw_stable);
  property p_ar_stable;
    @(posedge clk) disable iff (!rst_n) (s.arvalid && !s.arready) |=> s.arvalid;
  endproperty
  assert property (p_ar_stable);
endmodule
