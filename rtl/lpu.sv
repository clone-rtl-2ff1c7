// lpu: the LoRA Processing Unit.
//
// Holds every LoRA expert permanently in the eNVM, so that switching adapters for a
// new request ("hot-swapping") costs no weight reload, and serves two commands from
// the host:
//   ROUTE  reads the prompt embedding from the PUB and runs the soft MoE router;
//          the gate weights omega_j and the dominant expert become readable, and a
//          ROUTE_DONE message carrying the dominant expert goes to the SFU.
//   LORA   runs the LoRA datapath on the x / y vectors in the PUB with the current
//          gate weights, leaving y' = y + sum_j omega_j*E_j(x) in place of y, and
//          sends LAYER_DONE (with the layer register, which then increments) to
//          the SFU; that message marks the layer boundary at which the SFU applies
//          the next voltage/frequency setting.
// The SFU answers with VF_ACK messages; the level they carry is shown in STATUS.
//
// Host interface: an AXI4-Lite slave partition. Byte address bits [30:29] pick
// registers (00, see clone_pkg), the PUB window (01) or the eNVM window (10). In a
// window each 32-bit word holds two consecutive 16-bit elements (element 2n in bits
// 15:0). PUB element map: x at 0..D_MODEL-1, y at D_MODEL..2*D_MODEL-1, prompt
// embedding at 2*D_MODEL... eNVM element map: A, then B (see lora_datapath), then
// the expert embeddings, EMB_DIM elements per expert. Window accesses and commands
// are refused while a command runs or the eNVM is not awake; a refused access sets
// the sticky STATUS.err bit (cleared by writing STATUS).
// The unit's function is the paper's; the command set, register and memory maps
// and messages are this design's.
module lpu
  import clone_pkg::*;
#(
  parameter int unsigned D_MODEL   = 4096,
  parameter int unsigned RANK      = 8,
  parameter int unsigned N_EXPERTS = 10,
  parameter int unsigned EMB_DIM   = 1024,
  parameter int unsigned LANES     = 8,
  parameter int unsigned FRAC      = 8,
  parameter int unsigned ENVM_WAKE = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  axi_lite_if.slave s_axi,
  input  logic      pwr_on,
  // channel to the SFU
  output logic      tx_valid,
  input  logic      tx_ready,
  output chan_msg_t tx_msg,
  input  logic      rx_valid,
  output logic      rx_ready,
  input  chan_msg_t rx_msg
);
  localparam int unsigned NR        = N_EXPERTS * RANK;
  localparam int unsigned PUB_ELEMS = 2 * D_MODEL + EMB_DIM;
  localparam int unsigned BANK_DEPTH = PUB_ELEMS / LANES;
  localparam int unsigned PUB_RA    = $clog2(BANK_DEPTH);
  localparam int unsigned LB        = $clog2(LANES);
  localparam int unsigned PUB_EA    = PUB_RA + LB;
  localparam int unsigned A_WORDS   = NR * D_MODEL / LANES;
  localparam int unsigned ENVM_DEPTH = 2 * A_WORDS + N_EXPERTS * EMB_DIM / LANES;
  localparam int unsigned ENVM_AW   = $clog2(ENVM_DEPTH);
  localparam int unsigned XW        = (N_EXPERTS > 1) ? $clog2(N_EXPERTS) : 1;

  // ---------------- AXI to register port ----------------
  logic        wr_en, rd_req, rd_ack;
  logic [31:0] wr_addr, wr_data, rd_addr, rd_data;
  axil_to_reg u_axil (
    .clk, .rst_n, .s(s_axi),
    .wr_en, .wr_addr, .wr_data, .rd_req, .rd_addr, .rd_ack, .rd_data);

  // ---------------- memories ----------------
  logic                    envm_ready, envm_err;
  logic                    envm_we, envm_re;
  logic [LANES-1:0]        envm_wmask;
  logic [ENVM_AW-1:0]      envm_waddr, envm_raddr;
  logic [LANES*16-1:0]     envm_wdata, envm_rdata;
  envm_buffer #(.LANES(LANES), .ELEM_W(16), .DEPTH(ENVM_DEPTH), .WAKE_CYCLES(ENVM_WAKE)) u_envm (
    .clk, .rst_n, .pwr_on, .ready(envm_ready),
    .we(envm_we), .wmask(envm_wmask), .waddr(envm_waddr), .wdata(envm_wdata),
    .re(envm_re), .raddr(envm_raddr), .rdata(envm_rdata), .err(envm_err));

  logic                pub_re, pub_we, pub_we2;
  logic [PUB_RA-1:0]   pub_row;
  logic [PUB_EA-1:0]   pub_waddr, pub_waddr2;
  logic [15:0]         pub_wdata;
  logic [31:0]         pub_wdata2;
  logic [LANES*16-1:0] pub_rdata;
  pub_buffer #(.LANES(LANES), .ELEM_W(16), .BANK_DEPTH(BANK_DEPTH)) u_pub (
    .clk, .rd_en(pub_re), .rd_row(pub_row), .rd_data(pub_rdata),
    .wr_en(pub_we), .wr_addr(pub_waddr), .wr_data(pub_wdata),
    .wr2_en(pub_we2), .wr2_addr(pub_waddr2), .wr2_data(pub_wdata2));

  // ---------------- router and datapath ----------------
  logic                 rt_start, rt_busy, rt_done, rt_rd;
  logic [PUB_RA-1:0]    rt_row;
  logic [ENVM_AW-1:0]   rt_addr;
  logic [15:0]          omega [N_EXPERTS];
  logic signed [15:0]   score [N_EXPERTS];
  logic [XW-1:0]        top_idx;
  logic [31:0]          rt_cycles;
  moe_router #(
    .N_EXPERTS(N_EXPERTS), .EMB_DIM(EMB_DIM), .LANES(LANES), .PUB_RA(PUB_RA), .ENVM_AW(ENVM_AW),
    .EMB_ROW0(PUB_RA'(2 * D_MODEL / LANES)), .EMB_WORD0(ENVM_AW'(2 * A_WORDS))
  ) u_router (
    .clk, .rst_n, .start(rt_start), .busy(rt_busy), .done(rt_done),
    .rd_en(rt_rd), .pub_row(rt_row), .envm_addr(rt_addr),
    .pub_rdata, .envm_rdata, .omega, .score, .top_idx, .cycles(rt_cycles));

  logic                 dp_start, dp_busy, dp_done, dp_rd, dp_we;
  logic [PUB_RA-1:0]    dp_row;
  logic [ENVM_AW-1:0]   dp_addr;
  logic [PUB_EA-1:0]    dp_waddr;
  logic [15:0]          dp_wdata;
  logic [31:0]          dp_cycles;
  lora_datapath #(
    .D_MODEL(D_MODEL), .RANK(RANK), .N_EXPERTS(N_EXPERTS), .LANES(LANES), .FRAC(FRAC),
    .LORA_SHIFT(1), .PUB_RA(PUB_RA), .ENVM_AW(ENVM_AW),
    .X_ROW0('0), .Y_ELEM0(PUB_EA'(D_MODEL)), .A_WORD0('0), .B_WORD0(ENVM_AW'(A_WORDS))
  ) u_dp (
    .clk, .rst_n, .start(dp_start), .busy(dp_busy), .done(dp_done), .omega,
    .rd_en(dp_rd), .pub_row(dp_row), .envm_addr(dp_addr), .pub_rdata, .envm_rdata,
    .y_we(dp_we), .y_addr(dp_waddr), .y_data(dp_wdata), .cycles(dp_cycles));

  // ---------------- control ----------------
  logic        tx_pend, done_flag, err_flag;
  logic [15:0] layer;
  logic [3:0]  vf_level;
  logic [7:0]  n_ack;
  logic [31:0] last_cycles;
  logic        unit_busy;
  assign unit_busy = rt_busy || dp_busy || tx_pend || rt_start || dp_start;

  // host window decode
  logic [1:0]  wsel_w;
  logic [27:0] welem_w, welem_r;   // element index of the pair's first element
  assign wsel_w  = wr_addr[30:29];
  assign welem_w = {wr_addr[28:2], 1'b0};
  assign welem_r = {rd_addr[28:2], 1'b0};

  logic host_mem_ok;
  assign host_mem_ok = !unit_busy && envm_ready;

  // host reads of the windows: issue the memory read, answer one cycle later
  logic       hr_pend, hr_issue, hr_ret;
  logic [1:0] hr_sel;
  logic [LB-1:0] hr_lane;
  assign hr_issue = hr_pend && host_mem_ok && hr_sel != 2'b11;

  // memory port muxing: router, datapath or host
  always_comb begin
    pub_re     = rt_rd || dp_rd || (hr_issue && hr_sel == 2'b01);
    pub_row    = rt_rd ? rt_row : dp_rd ? dp_row : PUB_RA'(welem_r[27:LB]);
    envm_re    = rt_rd || dp_rd || (hr_issue && hr_sel == 2'b10);
    envm_raddr = rt_rd ? rt_addr : dp_rd ? dp_addr : ENVM_AW'(welem_r[27:LB]);

    pub_we     = dp_we;
    pub_waddr  = dp_waddr;
    pub_wdata  = dp_wdata;
    pub_we2    = wr_en && wsel_w == 2'b01 && host_mem_ok && !wr_addr[31];
    pub_waddr2 = PUB_EA'(welem_w);
    pub_wdata2 = wr_data;

    envm_we    = wr_en && wsel_w == 2'b10 && host_mem_ok;
    envm_waddr = ENVM_AW'(welem_w[27:LB]);
    envm_wmask = LANES'(2'b11) << welem_w[LB-1:0];
    envm_wdata = '0;
    for (int l = 0; l < LANES; l += 2) envm_wdata[l*16 +: 32] = wr_data;
  end

  // register reads
  logic [31:0] reg_rdata;
  always_comb begin
    reg_rdata = '0;
    if (rd_addr[7:6] == 2'b01) begin
      reg_rdata = {16'd0, omega[rd_addr[5:2] < 4'(N_EXPERTS) ? XW'(rd_addr[5:2]) : XW'(0)]};
    end else if (rd_addr[7:6] == 2'b10) begin
      reg_rdata = 32'($signed(score[rd_addr[5:2] < 4'(N_EXPERTS) ? XW'(rd_addr[5:2]) : XW'(0)]));
    end else begin
      case (rd_addr[7:0])
        LPU_REG_STATUS: reg_rdata = {16'd0, n_ack, vf_level, envm_ready, err_flag, done_flag, unit_busy};
        LPU_REG_LAYER:  reg_rdata = {16'd0, layer};
        LPU_REG_TOP:    reg_rdata = 32'(top_idx);
        LPU_REG_CYCLES: reg_rdata = last_cycles;
        default:        reg_rdata = '0;
      endcase
    end
  end

  assign rx_ready = 1'b1;
  assign tx_valid = tx_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rt_start <= 1'b0; dp_start <= 1'b0; tx_pend <= 1'b0; tx_msg <= '0;
      done_flag <= 1'b0; err_flag <= 1'b0; layer <= '0; vf_level <= '0; n_ack <= '0;
      last_cycles <= '0; hr_pend <= 1'b0; hr_ret <= 1'b0; hr_sel <= '0; hr_lane <= '0;
      rd_ack <= 1'b0; rd_data <= '0;
    end else begin
      rt_start <= 1'b0;
      dp_start <= 1'b0;
      rd_ack   <= 1'b0;

      // ---- host writes ----
      if (wr_en) begin
        if (wsel_w == 2'b00) begin
          case (wr_addr[7:0])
            LPU_REG_CMD: begin
              if (unit_busy || !envm_ready) err_flag <= 1'b1;
              else if (wr_data[3:0] == LPU_CMD_ROUTE) begin rt_start <= 1'b1; done_flag <= 1'b0; end
              else if (wr_data[3:0] == LPU_CMD_LORA)  begin dp_start <= 1'b1; done_flag <= 1'b0; end
              else err_flag <= 1'b1;
            end
            LPU_REG_STATUS: err_flag <= 1'b0;
            LPU_REG_LAYER:  layer <= wr_data[15:0];
            default: ;
          endcase
        end else if (!host_mem_ok) err_flag <= 1'b1;
      end
      if (envm_err) err_flag <= 1'b1;

      // ---- host reads ----
      if (rd_req) begin
        if (rd_addr[30:29] == 2'b00) begin
          rd_ack  <= 1'b1;
          rd_data <= reg_rdata;
        end else begin
          hr_pend <= 1'b1;
          hr_sel  <= rd_addr[30:29];
          hr_lane <= welem_r[LB-1:0];
        end
      end
      if (hr_issue) hr_pend <= 1'b0;
      hr_ret <= hr_issue;
      if (hr_pend && hr_sel == 2'b11) begin   // unmapped window: read as zero
        hr_pend <= 1'b0;
        rd_ack  <= 1'b1;
        rd_data <= '0;
      end
      // data of a window read arrive the cycle after the issue
      if (hr_ret) begin
        rd_ack  <= 1'b1;
        rd_data <= (hr_sel == 2'b01) ? pub_rdata[int'(hr_lane) * 16 +: 32]
                                     : envm_rdata[int'(hr_lane) * 16 +: 32];
      end

      // ---- completion and messages ----
      if (rt_done) begin
        done_flag   <= 1'b1;
        last_cycles <= rt_cycles;
        tx_pend     <= 1'b1;
        tx_msg      <= '{mtype: MSG_ROUTE_DONE, payload: 20'(top_idx)};
      end
      if (dp_done) begin
        done_flag   <= 1'b1;
        last_cycles <= dp_cycles;
        tx_pend     <= 1'b1;
        tx_msg      <= '{mtype: MSG_LAYER_DONE, payload: 20'(layer)};
        layer       <= layer + 1'b1;
      end
      if (tx_pend && tx_ready) tx_pend <= 1'b0;

      // ---- messages from the SFU ----
      if (rx_valid && rx_msg.mtype == MSG_VF_ACK) begin
        vf_level <= rx_msg.payload[3:0];
        n_ack    <= n_ack + 1'b1;
      end
    end
  end
endmodule
