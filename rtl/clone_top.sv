// clone_top: the CLONE accelerator, a companion chip for an edge GPU that runs a
// pruned LLM. It takes two jobs off the GPU's general-purpose cores:
//   * choosing and applying LoRA adapters per request: the LPU scores the request
//     against every stored expert, mixes the experts with softmax weights and adds
//     the mixed adapter to each layer output the GPU hands it;
//   * per-layer DVFS: the SFU predicts the output length, derives a per-token time
//     budget and, at every layer boundary, picks a voltage/frequency level with a
//     small learned policy and drives the LDO and the ADPLL that supply the
//     processors.
// Structure: the host's AXI4-Lite port goes through the AXI splitter to the LPU
// partition (address bit 31 = 0) and the SFU partition (bit 31 = 1). The LPU and
// SFU talk over a two-way message channel. The chip controller walks each request
// through idle, wake-up, prefill and decode and powers the LPU only when needed.
// The LDO and ADPLL are behavioural models; their outputs are the top's vdd_mv
// and proc_clk ports. The host link (a PCIe endpoint on an interface board) and the
// chip clock PLL are outside this RTL: clk and the AXI port come from them.
// Block list and connections follow the paper's description of the accelerator;
// the bus, channel protocol, register maps and number formats are this design's.
module clone_top
  import clone_pkg::*;
#(
  parameter int unsigned D_MODEL   = 4096,
  parameter int unsigned RANK      = 8,
  parameter int unsigned N_EXPERTS = 10,
  parameter int unsigned EMB_DIM   = 1024,
  parameter int unsigned LANES     = 8,
  parameter int unsigned N_LAYERS  = 32,
  parameter int unsigned N_ACT     = 16,
  parameter int unsigned HIDDEN    = 32,
  parameter int unsigned WAKE_CYCLES = 16,
  parameter int unsigned TICK_CYCLES = 100
) (
  input  logic        clk,
  input  logic        rst_n,
  // host AXI4-Lite slave
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_awaddr,
  input  logic        s_wvalid,
  output logic        s_wready,
  input  logic [31:0] s_wdata,
  output logic        s_bvalid,
  input  logic        s_bready,
  output logic [1:0]  s_bresp,
  input  logic        s_arvalid,
  output logic        s_arready,
  input  logic [31:0] s_araddr,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  // supply and clock for the processors
  output logic        proc_clk,
  output logic [11:0] vdd_mv,
  output logic [11:0] proc_freq_mhz,
  output phase_e      phase
);
  axi_lite_if host_if ();
  axi_lite_if lpu_if ();
  axi_lite_if sfu_if ();

  assign host_if.awvalid = s_awvalid;
  assign host_if.awaddr  = s_awaddr;
  assign host_if.wvalid  = s_wvalid;
  assign host_if.wdata   = s_wdata;
  assign host_if.bready  = s_bready;
  assign host_if.arvalid = s_arvalid;
  assign host_if.araddr  = s_araddr;
  assign host_if.rready  = s_rready;
  assign s_awready = host_if.awready;
  assign s_wready  = host_if.wready;
  assign s_bvalid  = host_if.bvalid;
  assign s_bresp   = host_if.bresp;
  assign s_arready = host_if.arready;
  assign s_rvalid  = host_if.rvalid;
  assign s_rdata   = host_if.rdata;
  assign s_rresp   = host_if.rresp;

  axi_splitter #(.SEL_BIT(31)) u_split (
    .clk, .rst_n, .s(host_if), .m_lpu(lpu_if), .m_sfu(sfu_if));

  // chip controller
  logic        c_start, c_first, c_eos, lpu_pwr;
  logic [15:0] requests;
  chip_ctrl #(.WAKE_CYCLES(WAKE_CYCLES)) u_chip (
    .clk, .rst_n, .start(c_start), .first_token(c_first), .eos(c_eos),
    .phase, .lpu_pwr, .requests, .bad_cmds());

  // LPU <-> SFU channel
  logic      l2s_iv, l2s_ir, l2s_ov, l2s_or;
  logic      s2l_iv, s2l_ir, s2l_ov, s2l_or;
  chan_msg_t l2s_im, l2s_om, s2l_im, s2l_om;
  lpu_sfu_channel #(.DEPTH(4)) u_chan (
    .clk, .rst_n,
    .l2s_in_valid(l2s_iv), .l2s_in_ready(l2s_ir), .l2s_in_msg(l2s_im),
    .l2s_out_valid(l2s_ov), .l2s_out_ready(l2s_or), .l2s_out_msg(l2s_om),
    .s2l_in_valid(s2l_iv), .s2l_in_ready(s2l_ir), .s2l_in_msg(s2l_im),
    .s2l_out_valid(s2l_ov), .s2l_out_ready(s2l_or), .s2l_out_msg(s2l_om));

  lpu #(
    .D_MODEL(D_MODEL), .RANK(RANK), .N_EXPERTS(N_EXPERTS), .EMB_DIM(EMB_DIM), .LANES(LANES)
  ) u_lpu (
    .clk, .rst_n, .s_axi(lpu_if), .pwr_on(lpu_pwr),
    .tx_valid(l2s_iv), .tx_ready(l2s_ir), .tx_msg(l2s_im),
    .rx_valid(s2l_ov), .rx_ready(s2l_or), .rx_msg(s2l_om));

  logic [7:0] vdd_code, freq_code;
  logic       ldo_pg, pll_lock;
  sfu #(
    .N_LAYERS(N_LAYERS), .N_TASKS(N_EXPERTS), .N_ACT(N_ACT), .HIDDEN(HIDDEN),
    .TICK_CYCLES(TICK_CYCLES)
  ) u_sfu (
    .clk, .rst_n, .s_axi(sfu_if),
    .ctl_start(c_start), .ctl_first_token(c_first), .ctl_eos(c_eos), .phase, .requests,
    .rx_valid(l2s_ov), .rx_ready(l2s_or), .rx_msg(l2s_om),
    .tx_valid(s2l_iv), .tx_ready(s2l_ir), .tx_msg(s2l_im),
    .vdd_code, .freq_code, .ldo_pg, .pll_lock);

  ldo u_ldo (.clk, .rst_n, .vdd_code, .vout_mv(vdd_mv), .pg(ldo_pg));
  adpll u_pll (.clk, .rst_n, .freq_code, .clk_out(proc_clk), .lock(pll_lock),
               .freq_mhz(proc_freq_mhz));
endmodule
