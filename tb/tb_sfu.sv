// tb_sfu: runs the Special Function Unit through one request with the chip
// controller, LDO and PLL models around it and the LPU side played by the test
// (N_LAYERS 4, a 10-cycle tick). The MLP is loaded with weights that make the
// policy choose level (next layer + 2): one hidden unit h0 = layer + 2, and
// Q[a] = 2*a*h0 - a*a, which is largest at a = h0. The test checks:
//   * entering PREFILL applies the prefill level (a switch up);
//   * ROUTE_DONE makes the predictor look up the table for the dominant task;
//   * entering DECODE yields T_DEC = (T_target - T_PRE) / N_pred;
//   * each LAYER_DONE in DECODE runs the policy and is answered by VF_ACK with the
//     chosen level, in order; a burst of messages is held off (back-pressure);
//   * layer boundaries in PREFILL keep the prefill level;
//   * a switch down happens (level 5 -> 2), and IDLE returns to level 0;
//   * the V/F codes match the action table, and energy and time are accounted.
module tb_sfu;
  import clone_pkg::*;
  localparam int NL = 4, NA = 16, H = 32, NI = 4, TICK = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_lite_if hs ();
  logic ctl_start, ctl_first_token, ctl_eos, lpu_pwr;
  phase_e phase;
  logic [15:0] requests, bad_cmds;
  logic rx_valid, rx_ready, tx_valid, tx_ready;
  chan_msg_t rx_msg, tx_msg;
  logic [7:0] vdd_code, freq_code;
  logic ldo_pg, pll_lock, pclk;
  logic [11:0] vout_mv, freq_mhz;

  sfu #(.N_LAYERS(NL), .N_ACT(NA), .HIDDEN(H), .TICK_CYCLES(TICK)) dut (
    .clk, .rst_n, .s_axi(hs), .ctl_start, .ctl_first_token, .ctl_eos, .phase, .requests,
    .rx_valid, .rx_ready, .rx_msg, .tx_valid, .tx_ready, .tx_msg,
    .vdd_code, .freq_code, .ldo_pg, .pll_lock);
  chip_ctrl u_cc (.clk, .rst_n, .start(ctl_start), .first_token(ctl_first_token), .eos(ctl_eos),
                  .phase, .lpu_pwr, .requests, .bad_cmds);
  ldo u_ldo (.clk, .rst_n, .vdd_code, .vout_mv, .pg(ldo_pg));
  adpll #(.LOCK_CYCLES(8)) u_pll (.clk, .rst_n, .freq_code, .clk_out(pclk), .lock(pll_lock), .freq_mhz);

  `include "axil_host_tasks.svh"

  // LPU side: a queue of messages to send, a log of VF_ACK levels received
  chan_msg_t to_send [$];
  int acks [$];
  int n_backpressure = 0;
  assign tx_ready = 1'b1;
  always @(posedge clk) begin
    if (rx_valid && !rx_ready) n_backpressure++;
    if (rx_valid && rx_ready) void'(to_send.pop_front());
    if (tx_valid && tx_ready && tx_msg.mtype == MSG_VF_ACK) acks.push_back(int'(tx_msg.payload));
  end
  always @(negedge clk) begin
    rx_valid = to_send.size() > 0;
    rx_msg   = (to_send.size() > 0) ? to_send[0] : '0;
  end

  task automatic send(msg_type_e t, int p);
    chan_msg_t m;
    m.mtype = t; m.payload = 20'(p);
    to_send.push_back(m);
  endtask

  task automatic wait_acks(int n);
    int guard;
    guard = 0;
    while (acks.size() < n && guard < 20000) begin @(posedge clk); guard++; end
  endtask

  task automatic expect_reg(logic [7:0] a, int want, string what);
    logic [31:0] d;
    axi_read(32'h8000_0000 | 32'(a), d);
    checks++;
    if (int'(d) != want) begin failures++; $display("%s = %0d, want %0d", what, d, want); end
  endtask

  function automatic int vf(int l); return ((50 + 5*l) << 8) | (20 + 4*l); endfunction

  initial begin
    logic [31:0] d, tpre;
    axi_init();
    rx_valid = 0; rx_msg = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (60) @(posedge clk);
    // ---- tables ----
    for (int p = 0; p < NI*H + H + H*NA + NA; p++) begin
      int v;
      v = 0;
      if (p == 3) v = 256;                          // W1[0][3] = 1.0 (next layer)
      if (p == NI*H) v = 2;                         // b1[0] = 2
      if (p >= NI*H + H && p < NI*H + H + H*NA && (p - NI*H - H) % H == 0)
        v = 512 * ((p - NI*H - H) / H);             // W2[a][0] = 2a
      if (p >= NI*H + H + H*NA) v = -((p - NI*H - H - H*NA) ** 2);   // b2[a] = -a^2
      axi_write(32'h8000_1000 | 32'(4*p), 32'(v));
    end
    for (int a = 0; a < 10*16; a++) axi_write(32'h8000_2000 | 32'(4*a), 32'(a / 16 + 5));  // n_pred = task + 5
    for (int a = 0; a < 2*NA; a++) axi_write(32'h8000_4000 | 32'(4*a), 32'(100 + 10*a));
    axi_write(32'h8000_0000 | 32'(SFU_REG_PRELVL), 32'd12);
    axi_write(32'h8000_0000 | 32'(SFU_REG_TTARGET), 32'd5000);
    axi_write(32'h8000_0000 | 32'(SFU_REG_PLEN), 32'd100);
    axi_write(32'h8000_0000 | 32'(SFU_REG_SPRO), 32'd3);
    // ---- request: prefill ----
    axi_write(32'h8000_0000 | 32'(SFU_REG_CTRL), 32'h1);
    while (phase != PH_PREFILL) @(posedge clk);
    send(MSG_ROUTE_DONE, 3);
    send(MSG_LAYER_DONE, 0);
    send(MSG_LAYER_DONE, 1);
    wait_acks(2);
    checks++;
    if (acks.size() != 2 || acks[0] != 12 || acks[1] != 12) begin failures++; $display("prefill acks wrong"); end
    expect_reg(SFU_REG_VF, vf(12), "VF code in prefill");
    expect_reg(SFU_REG_NPRED, 8, "predicted tokens");
    repeat (200) @(posedge clk);
    // ---- decode ----
    axi_write(32'h8000_0000 | 32'(SFU_REG_CTRL), 32'h2);
    repeat (60) @(posedge clk);
    axi_read(32'h8000_0000 | 32'(SFU_REG_TPRE), tpre);
    checks++;
    if (tpre < 20) begin failures++; $display("prefill time %0d us", tpre); end
    expect_reg(SFU_REG_TDEC, (5000 - int'(tpre)) / 8, "T_DEC");
    // burst of layer boundaries: 2 -> next layers 3, 0(wrap), 1, 2 after layer 3 wraps
    send(MSG_LAYER_DONE, 2);
    send(MSG_LAYER_DONE, 3);
    send(MSG_LAYER_DONE, 0);
    send(MSG_LAYER_DONE, 1);
    wait_acks(6);
    checks++;
    if (acks.size() != 6 || acks[2] != 5 || acks[3] != 2 || acks[4] != 3 || acks[5] != 4) begin
      failures++;
      $display("decode acks wrong: %0d acks", acks.size());
      foreach (acks[i]) $display("  ack %0d: level %0d", i, acks[i]);
    end
    expect_reg(SFU_REG_NPOLICY, 4, "policy evaluations");
    expect_reg(SFU_REG_ACTION, 4, "last action");
    expect_reg(SFU_REG_VF, vf(4), "VF code in decode");
    expect_reg(SFU_REG_NLAYER, 6, "layer events");
    checks++;
    if (n_backpressure == 0) begin failures++; $display("no back-pressure seen"); end
    // ---- end of request ----
    axi_write(32'h8000_0000 | 32'(SFU_REG_CTRL), 32'h4);
    repeat (200) @(posedge clk);
    expect_reg(SFU_REG_VF, vf(0), "VF code after the request");
    axi_read(32'h8000_0000 | 32'(SFU_REG_STATUS), d);
    checks++;
    if (d[23:8] != 16'd1 || d[7:4] != 4'd0 || d[2:1] != 2'(PH_IDLE)) begin failures++; $display("status %h", d); end
    // switches: 0->12, 12->5, 5->2, 2->3, 3->4, 4->0 (12->12 in prefill is no switch)
    expect_reg(SFU_REG_NSWITCH, 6, "V/F switches");
    axi_read(32'h8000_0000 | 32'(SFU_REG_ENERGY_L), d);
    checks++;
    if (d < 32'(int'(tpre) * (100 + 10*24))) begin failures++; $display("energy %0d too small", d); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
