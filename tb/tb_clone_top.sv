// tb_clone_top: end-to-end test of the accelerator at reduced size (model width 32,
// rank 2, 4 experts, 32-element embeddings, 8 layers, 10-cycle energy tick).
// Two requests run through the whole chip: wake-up, adapter load (first request
// only; the second relies on the eNVM having kept them while the LPU was powered
// down), routing, a prefill pass over all layers and two generated tokens of all
// layers each. Every LoRA pass is checked exactly against a reference, routing
// against a floating-point gate, and the V/F level in force after each token
// against the level the loaded policy must choose. The test counts each mechanism
// of the design and fails if any never happened:
//   routing, LoRA pass, policy evaluation, V/F switch up, V/F switch down,
//   phase changes (all four phases), channel stall (LPU holding a message because
//   the channel is full), back-pressure (SFU refusing a message while busy), and
//   the host's end-of-token wait for the V/F acknowledge.
module tb_clone_top;
  import clone_pkg::*;
  localparam int D = 32, R = 2, N = 4, E = 32, L = 8, NL = 8, NA = 16, H = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_lite_if hs ();
  logic proc_clk;
  logic [11:0] vdd_mv, proc_freq_mhz;
  phase_e phase;
  clone_top #(.D_MODEL(D), .RANK(R), .N_EXPERTS(N), .EMB_DIM(E), .LANES(L), .N_LAYERS(NL),
              .N_ACT(NA), .HIDDEN(H), .WAKE_CYCLES(16), .TICK_CYCLES(10)) dut (
    .clk, .rst_n,
    .s_awvalid(hs.awvalid), .s_awready(hs.awready), .s_awaddr(hs.awaddr),
    .s_wvalid(hs.wvalid), .s_wready(hs.wready), .s_wdata(hs.wdata),
    .s_bvalid(hs.bvalid), .s_bready(hs.bready), .s_bresp(hs.bresp),
    .s_arvalid(hs.arvalid), .s_arready(hs.arready), .s_araddr(hs.araddr),
    .s_rvalid(hs.rvalid), .s_rready(hs.rready), .s_rdata(hs.rdata), .s_rresp(hs.rresp),
    .proc_clk, .vdd_mv, .proc_freq_mhz, .phase);

  `include "axil_host_tasks.svh"
  `include "clone_flow.svh"

  // ---- mechanism counters ----
  int n_route = 0, n_lora = 0, n_policy = 0, n_up = 0, n_down = 0, n_phase = 0;
  int n_stall = 0, n_backpressure = 0, n_token_wait = 0;
  bit seen_phase [4];
  logic [3:0] lvl_q;
  phase_e ph_q;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_lpu.rt_done) n_route++;
    if (dut.u_lpu.dp_done) n_lora++;
    if (dut.u_sfu.pol_done) n_policy++;
    if (dut.u_sfu.level > lvl_q) n_up++;
    if (dut.u_sfu.level < lvl_q) n_down++;
    lvl_q <= dut.u_sfu.level;
    if (phase != ph_q) n_phase++;
    ph_q <= phase;
    seen_phase[int'(phase)] = 1;
    if (dut.l2s_iv && !dut.l2s_ir) n_stall++;
    if (dut.l2s_ov && !dut.l2s_or) n_backpressure++;
  end

  task automatic count(string name, int n);
    checks++;
    $display("mechanism %-14s %0d", name, n);
    if (n == 0) begin failures++; $display("mechanism %s never happened", name); end
  endtask

  task automatic run_request(int req, bit load_adapters);
    int acks, waited;
    logic [31:0] d;
    flow_sfu_ctrl(32'h1);                 // start
    flow_wait_phase(PH_PREFILL);
    do axi_read(32'h04, d); while (!d[3]); // eNVM awake
    if (load_adapters) flow_load_envm();
    flow_make_request(100 + req, (req == 0) ? 1 : 3);
    flow_load_pub();
    flow_route();
    acks = int'(d[15:8]);
    // prefill: all layers at the prefill level
    axi_write(32'h08, 32'd0);
    for (int l = 0; l < NL; l++) flow_layer(1);
    acks += NL;
    flow_wait_acks(acks, waited);
    n_token_wait += waited;
    axi_read(32'h04, d);
    checks++;
    if (d[7:4] != 4'd12) begin failures++; $display("prefill level %0d", d[7:4]); end
    flow_sfu_ctrl(32'h2);                 // first token
    flow_wait_phase(PH_DECODE);
    repeat (100) @(posedge clk);          // T_DEC budget ready
    for (int t = 0; t < 2; t++) begin
      axi_write(32'h08, 32'd0);
      for (int l = 0; l < NL; l++) flow_layer(1);
      acks += NL;
      flow_wait_acks(acks, waited);
      n_token_wait += waited;
      // last boundary of a token: next layer wraps to 0, policy picks level 2
      axi_read(32'h04, d);
      checks++;
      if (d[7:4] != 4'd2) begin failures++; $display("level after token %0d: %0d", t, d[7:4]); end
    end
    flow_sfu_ctrl(32'h4);                 // end of sequence
    flow_wait_phase(PH_IDLE);
    repeat (150) @(posedge clk);
    checks++;
    if (vdd_mv != 12'd600 || proc_freq_mhz != 12'd250) begin
      failures++; $display("idle supply %0d mV %0d MHz", vdd_mv, proc_freq_mhz);
    end
  endtask

  initial begin
    logic [31:0] d;
    axi_init();
    lvl_q = 0; ph_q = PH_IDLE;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    flow_load_sfu(12, 20000, 64);
    flow_make_adapters(7);
    run_request(0, 1);
    run_request(1, 0);
    axi_read(SFUB | 32'h14, d);
    checks++;
    if (d[23:8] != 16'd2) begin failures++; $display("requests %0d", d[23:8]); end
    axi_read(SFUB | 32'h40, d);
    checks++;
    if (int'(d) != 2 * 2 * NL) begin failures++; $display("policy evaluations %0d", d); end
    count("routing", n_route);
    count("lora_pass", n_lora);
    count("policy_eval", n_policy);
    count("vf_switch_up", n_up);
    count("vf_switch_down", n_down);
    count("phase_change", n_phase);
    for (int p = 0; p < 4; p++) count($sformatf("phase_%0d", p), int'(seen_phase[p]));
    count("stall", n_stall);
    count("backpressure", n_backpressure);
    count("token_wait", n_token_wait);
    $display("LoRA passes checked exactly: %0d", n_lora_checked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
