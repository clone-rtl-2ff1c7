// tb_clone_llama13b: one complete request through the accelerator sized for a
// 13-billion-parameter Llama-2 model (model width 5120, 40 layers) with the same
// ten rank-8 experts and 1024-element embeddings as the default build. It shows
// that the design scales to that model by its parameters alone. The host loads the
// adapters and expert embeddings, routes a prompt, runs the prefill over all 40
// layers and one generated token of 40 layers, and ends the request. The first
// and last LoRA pass of the prefill and the last pass of the token are compared
// element by element with an exact reference; routing is compared with a
// floating-point gate; the cycle count of a LoRA pass is checked against
// 2*N*r*D/LANES + 3 (102,403 cycles); the policy must see next-layer indices
// beyond 31 (the level after the token must be the policy's choice for layer 0,
// and it must have run once per decoded layer).
module tb_clone_llama13b;
  import clone_pkg::*;
  localparam int D = 5120, R = 8, N = 10, E = 1024, L = 8, NL = 40, NA = 16, H = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_lite_if hs ();
  logic proc_clk;
  logic [11:0] vdd_mv, proc_freq_mhz;
  phase_e phase;
  clone_top #(.D_MODEL(D), .N_LAYERS(NL)) dut (
    .clk, .rst_n,
    .s_awvalid(hs.awvalid), .s_awready(hs.awready), .s_awaddr(hs.awaddr),
    .s_wvalid(hs.wvalid), .s_wready(hs.wready), .s_wdata(hs.wdata),
    .s_bvalid(hs.bvalid), .s_bready(hs.bready), .s_bresp(hs.bresp),
    .s_arvalid(hs.arvalid), .s_arready(hs.arready), .s_araddr(hs.araddr),
    .s_rvalid(hs.rvalid), .s_rready(hs.rready), .s_rdata(hs.rdata), .s_rresp(hs.rresp),
    .proc_clk, .vdd_mv, .proc_freq_mhz, .phase);

  `include "axil_host_tasks.svh"
  `include "clone_flow.svh"

  initial begin
    logic [31:0] d;
    int waited;
    axi_init();
    repeat (3) @(posedge clk);
    rst_n <= 1;
    flow_load_sfu(12, 2000000, 512);
    flow_make_adapters(11);
    flow_sfu_ctrl(32'h1);
    flow_wait_phase(PH_PREFILL);
    do axi_read(32'h04, d); while (!d[3]);
    flow_load_envm();
    flow_make_request(5, 6);
    flow_load_pub();
    flow_route();
    $display("routed at %0t: dominant expert %0d", $time, f_top);
    axi_write(32'h08, 32'd0);
    for (int l = 0; l < NL; l++) begin
      flow_layer(l == 0 || l == NL - 1);
      if (l == 0) begin
        axi_read(32'h10, d);
        checks++;
        if (int'(d) < 2*NR*D/L + 1 || int'(d) > 2*NR*D/L + 3) begin failures++; $display("LoRA pass %0d cycles", d); end
      end
    end
    flow_wait_acks(NL, waited);
    $display("prefill done at %0t", $time);
    flow_sfu_ctrl(32'h2);
    flow_wait_phase(PH_DECODE);
    repeat (100) @(posedge clk);
    axi_write(32'h08, 32'd0);
    for (int l = 0; l < NL; l++) begin
      flow_layer(l == NL - 1);
      // after layer 31 the policy sees next layer 32: a 5-bit layer field would
      // wrap it to 0 and choose level 2; the policy's choice is level 15
      if (l == 31) begin
        flow_wait_acks(NL + 32, waited);
        axi_read(SFUB | 32'h3C, d);
        checks++;
        if (d[3:0] != 4'd15) begin failures++; $display("action for layer 32: %0d", d[3:0]); end
      end
    end
    flow_wait_acks(2 * NL, waited);
    axi_read(32'h04, d);
    checks++;
    if (d[7:4] != 4'd2) begin failures++; $display("level after the token %0d", d[7:4]); end
    axi_read(SFUB | 32'h40, d);
    checks++;
    if (int'(d) != NL) begin failures++; $display("policy evaluations %0d", d); end
    flow_sfu_ctrl(32'h4);
    flow_wait_phase(PH_IDLE);
    $display("request done at %0t", $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
