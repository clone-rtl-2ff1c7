// tb_axi_splitter: checks that the AXI4-Lite splitter steers every write and read
// to the partition chosen by address bit 31, returns that partition's response
// data, and keeps the two partitions apart. Each partition is a small register
// model that answers after a random delay and tags its read data with its own id.
module tb_axi_splitter;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_lite_if s ();
  axi_lite_if ml ();
  axi_lite_if ms ();
  axi_splitter dut (.clk, .rst_n, .s(s), .m_lpu(ml), .m_sfu(ms));

  // ---- partition models: 16 registers each, random ready/response delays ----
  logic [31:0] regs_l [16], regs_s [16];
  int          nwr_l = 0, nwr_s = 0, nrd_l = 0, nrd_s = 0;

  // LPU partition
  logic [31:0] l_aw; logic l_awh, l_wh; logic [31:0] l_w;
  initial begin
    ml.awready = 0; ml.wready = 0; ml.bvalid = 0; ml.bresp = 0;
    ml.arready = 0; ml.rvalid = 0; ml.rdata = 0; ml.rresp = 0;
  end
  always @(posedge clk) begin
    ml.awready <= ($urandom % 2) == 0;
    ml.wready  <= ($urandom % 2) == 0;
    ml.arready <= ($urandom % 2) == 0;
    if (ml.awvalid && ml.awready) begin l_aw = ml.awaddr; l_awh = 1; end
    if (ml.wvalid && ml.wready) begin l_w = ml.wdata; l_wh = 1; end
    if (l_awh && l_wh && !ml.bvalid) begin
      regs_l[l_aw[5:2]] = l_w; nwr_l++; l_awh = 0; l_wh = 0; ml.bvalid <= 1;
    end
    if (ml.bvalid && ml.bready) ml.bvalid <= 0;
    if (ml.arvalid && ml.arready) begin
      ml.rvalid <= 1; ml.rdata <= regs_l[ml.araddr[5:2]] ^ 32'h1000_0000; nrd_l++;
    end
    if (ml.rvalid && ml.rready) ml.rvalid <= 0;
  end
  // SFU partition
  logic [31:0] s_aw; logic s_awh, s_wh; logic [31:0] s_w;
  initial begin
    ms.awready = 0; ms.wready = 0; ms.bvalid = 0; ms.bresp = 0;
    ms.arready = 0; ms.rvalid = 0; ms.rdata = 0; ms.rresp = 0;
  end
  always @(posedge clk) begin
    ms.awready <= ($urandom % 3) == 0;
    ms.wready  <= ($urandom % 3) == 0;
    ms.arready <= ($urandom % 3) == 0;
    if (ms.awvalid && ms.awready) begin s_aw = ms.awaddr; s_awh = 1; end
    if (ms.wvalid && ms.wready) begin s_w = ms.wdata; s_wh = 1; end
    if (s_awh && s_wh && !ms.bvalid) begin
      regs_s[s_aw[5:2]] = s_w; nwr_s++; s_awh = 0; s_wh = 0; ms.bvalid <= 1;
    end
    if (ms.bvalid && ms.bready) ms.bvalid <= 0;
    if (ms.arvalid && ms.arready) begin
      ms.rvalid <= 1; ms.rdata <= regs_s[ms.araddr[5:2]] ^ 32'h2000_0000; nrd_s++;
    end
    if (ms.rvalid && ms.rready) ms.rvalid <= 0;
  end

  // ---- host tasks ----
  // The host keeps bready and rready high and samples every handshake on the
  // clock edge, so a response that is accepted in the same cycle is never missed.
  task automatic axi_write(input logic [31:0] a, input logic [31:0] d);
    bit b_done;
    b_done = 0;
    s.awvalid <= 1; s.awaddr <= a; s.wvalid <= 1; s.wdata <= d;
    while (!b_done) begin
      @(posedge clk);
      if (s.awvalid && s.awready) s.awvalid <= 0;
      if (s.wvalid && s.wready) s.wvalid <= 0;
      if (s.bvalid && s.bready) b_done = 1;
    end
  endtask
  task automatic axi_read(input logic [31:0] a, output logic [31:0] d);
    bit r_done;
    r_done = 0;
    s.arvalid <= 1; s.araddr <= a;
    while (!r_done) begin
      @(posedge clk);
      if (s.arvalid && s.arready) s.arvalid <= 0;
      if (s.rvalid && s.rready) begin r_done = 1; d = s.rdata; end
    end
  endtask

  logic [31:0] model_l [16], model_s [16];
  initial begin
    logic [31:0] d, a, v;
    s.awvalid = 0; s.wvalid = 0; s.bready = 1; s.arvalid = 0; s.rready = 1;
    s.awaddr = 0; s.wdata = 0; s.araddr = 0;
    l_awh = 0; l_wh = 0; s_awh = 0; s_wh = 0;
    for (int i = 0; i < 16; i++) begin regs_l[i] = 0; regs_s[i] = 0; model_l[i] = 0; model_s[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      a = {$urandom % 2 == 1, 25'd0, 4'($urandom), 2'b00};
      if (($urandom % 2) == 1) begin
        v = $urandom;
        axi_write(a, v);
        if (a[31]) model_s[a[5:2]] = v; else model_l[a[5:2]] = v;
      end else begin
        axi_read(a, d);
        checks++;
        if (d !== ((a[31] ? model_s[a[5:2]] ^ 32'h2000_0000 : model_l[a[5:2]] ^ 32'h1000_0000))) begin
          failures++;
          $display("read mismatch addr %h got %h", a, d);
        end
      end
    end
    // partitions saw only their own traffic
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (regs_l[i] !== model_l[i] || regs_s[i] !== model_s[i]) begin
        failures++; $display("register %0d differs", i);
      end
    end
    checks++;
    if (nwr_l == 0 || nwr_s == 0 || nrd_l == 0 || nrd_s == 0) begin
      failures++; $display("a partition saw no traffic");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
