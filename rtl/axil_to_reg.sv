// axil_to_reg: turns an AXI4-Lite slave port into a simple register-access port.
//
// A write is issued as a one-cycle wr_en pulse once both the address and the data
// beat have been accepted (they may arrive in either order); the B response follows
// on the next cycle. A read issues a one-cycle rd_req pulse and then waits for the
// user logic to answer with rd_ack and rd_data, which may take any number of cycles
// (memories behind the port answer one cycle later, the eNVM after its read). Only
// one write and one read are in flight. Responses are always OKAY.
module axil_to_reg #(
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned DATA_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  axi_lite_if.slave         s,
  output logic              wr_en,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [DATA_W-1:0] wr_data,
  output logic              rd_req,
  output logic [ADDR_W-1:0] rd_addr,
  input  logic              rd_ack,
  input  logic [DATA_W-1:0] rd_data
);
  logic aw_have, w_have, b_pend;
  logic ar_have, r_pend;

  assign s.awready = !aw_have && !b_pend;
  assign s.wready  = !w_have && !b_pend;
  assign s.bvalid  = b_pend;
  assign s.bresp   = 2'b00;
  assign s.arready = !ar_have && !r_pend;
  assign s.rvalid  = r_pend;
  assign s.rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_have <= 1'b0; w_have <= 1'b0; b_pend <= 1'b0;
      ar_have <= 1'b0; r_pend <= 1'b0;
      wr_en   <= 1'b0; rd_req <= 1'b0;
      wr_addr <= '0;   wr_data <= '0; rd_addr <= '0;
      s.rdata <= '0;
    end else begin
      wr_en  <= 1'b0;
      rd_req <= 1'b0;
      // write address and data, in either order
      if (s.awvalid && s.awready) begin aw_have <= 1'b1; wr_addr <= s.awaddr; end
      if (s.wvalid && s.wready)   begin w_have  <= 1'b1; wr_data <= s.wdata;  end
      if (aw_have && w_have) begin
        wr_en   <= 1'b1;
        aw_have <= 1'b0;
        w_have  <= 1'b0;
        b_pend  <= 1'b1;
      end
      if (b_pend && s.bready) b_pend <= 1'b0;
      // read
      if (s.arvalid && s.arready) begin
        ar_have <= 1'b1;
        rd_addr <= s.araddr;
        rd_req  <= 1'b1;
      end
      if (ar_have && rd_ack) begin
        ar_have <= 1'b0;
        r_pend  <= 1'b1;
        s.rdata <= rd_data;
      end
      if (r_pend && s.rready) r_pend <= 1'b0;
    end
  end
endmodule
