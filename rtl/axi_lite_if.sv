// axi_lite_if: AXI4-Lite bundle (AW, W, B, AR, R channels) used between the host
// link, the AXI splitter and the two slave partitions (LPU and SFU). Widths are
// parameters; the paper names an AXI bus but not its flavour, so AXI4-Lite with a
// 32-bit address and data word is this design's choice. PROT and STRB are omitted:
// every write is a full 32-bit word.
interface axi_lite_if #(
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned DATA_W = 32
);
  logic              awvalid, awready;
  logic [ADDR_W-1:0] awaddr;
  logic              wvalid, wready;
  logic [DATA_W-1:0] wdata;
  logic              bvalid, bready;
  logic [1:0]        bresp;
  logic              arvalid, arready;
  logic [ADDR_W-1:0] araddr;
  logic              rvalid, rready;
  logic [DATA_W-1:0] rdata;
  logic [1:0]        rresp;

  modport master (output awvalid, awaddr, wvalid, wdata, bready, arvalid, araddr, rready,
                  input  awready, wready, bvalid, bresp, arready, rvalid, rdata, rresp);
  modport slave  (input  awvalid, awaddr, wvalid, wdata, bready, arvalid, araddr, rready,
                  output awready, wready, bvalid, bresp, arready, rvalid, rdata, rresp);
endinterface
