// axil_host_tasks.svh: AXI4-Lite host tasks shared by the testbenches.
// Include inside a module that has a clock `clk` and an axi_lite_if instance `hs`
// driven by the testbench. bready and rready must be held high by the caller;
// every handshake is sampled on the rising clock edge, so responses accepted in
// the same cycle as the address are never missed.
task automatic axi_write(input logic [31:0] a, input logic [31:0] d);
  bit b_done;
  b_done = 0;
  hs.awvalid <= 1; hs.awaddr <= a; hs.wvalid <= 1; hs.wdata <= d;
  while (!b_done) begin
    @(posedge clk);
    if (hs.awvalid && hs.awready) hs.awvalid <= 0;
    if (hs.wvalid && hs.wready) hs.wvalid <= 0;
    if (hs.bvalid && hs.bready) b_done = 1;
  end
endtask

task automatic axi_read(input logic [31:0] a, output logic [31:0] d);
  bit r_done;
  r_done = 0;
  hs.arvalid <= 1; hs.araddr <= a;
  while (!r_done) begin
    @(posedge clk);
    if (hs.arvalid && hs.arready) hs.arvalid <= 0;
    if (hs.rvalid && hs.rready) begin r_done = 1; d = hs.rdata; end
  end
endtask

task automatic axi_init();
  hs.awvalid = 0; hs.wvalid = 0; hs.arvalid = 0; hs.bready = 1; hs.rready = 1;
  hs.awaddr = 0; hs.wdata = 0; hs.araddr = 0;
endtask
