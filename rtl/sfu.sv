// sfu: the Special Function Unit, which chooses and applies a voltage/frequency
// (V/F) level for every layer of every generated token.
//
// The SFU follows each request through the phases set by the chip controller and
// reacts to the LPU's messages:
//   * phase PREFILL entered: apply the prefill level (register PRELVL).
//   * ROUTE_DONE(task) from the LPU: look up the predicted output length for the
//     dominant task and the prompt-length bucket (token_predictor).
//   * phase DECODE entered: the energy meter has measured the prefill time T_PRE;
//     compute the per-token target T_DEC = (T_target - T_PRE) / N_pred.
//   * LAYER_DONE(l) from the LPU: a layer boundary. In DECODE the MLP policy is
//     evaluated on the state (S_pro, T_PRE, T_DEC, next layer) and the chosen level
//     is applied; in PREFILL the prefill level is kept. Either way the SFU answers
//     with VF_ACK(level) once the LDO and the PLL have settled, so the LPU (and the
//     host watching it) knows the next layer runs at the new point.
//   * phase IDLE entered: drop to level 0.
// While a message is being handled the SFU does not accept the next one; the
// channel FIFO holds it (back-pressure). Times are in microseconds; the state fed
// to the policy uses T >> 10 (about milliseconds).
// Host interface: an AXI4-Lite slave partition (address bit 31 = 1). Bits [14:12]
// pick registers (0, see clone_pkg), MLP weights (1), predictor table (2), action
// table (3) or power table (4); table index = byte offset / 4.
// What the SFU does is the paper's: a token predictor, a learned DVFS model kept in
// tables, an LDO and an ADPLL, applied at layer boundaries. The message protocol,
// the state scaling and the prefill/idle levels are this design's choices.
module sfu
  import clone_pkg::*;
#(
  parameter int unsigned N_LAYERS    = 32,
  parameter int unsigned N_TASKS     = 10,
  parameter int unsigned N_BUCKETS   = 16,
  parameter int unsigned N_ACT       = 16,
  parameter int unsigned HIDDEN      = 32,
  parameter int unsigned TICK_CYCLES = 100,
  localparam int unsigned AW         = (N_ACT > 1) ? $clog2(N_ACT) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  axi_lite_if.slave   s_axi,
  // chip controller
  output logic        ctl_start,
  output logic        ctl_first_token,
  output logic        ctl_eos,
  input  phase_e      phase,
  input  logic [15:0] requests,
  // channel
  input  logic        rx_valid,
  output logic        rx_ready,
  input  chan_msg_t   rx_msg,
  output logic        tx_valid,
  input  logic        tx_ready,
  output chan_msg_t   tx_msg,
  // regulator and PLL
  output logic [7:0]  vdd_code,
  output logic [7:0]  freq_code,
  input  logic        ldo_pg,
  input  logic        pll_lock
);
  localparam int unsigned N_IN   = 4;
  localparam int unsigned NPARAM = N_IN*HIDDEN + HIDDEN + HIDDEN*N_ACT + N_ACT;
  localparam int unsigned PW     = $clog2(NPARAM);
  localparam int unsigned TW     = $clog2(N_TASKS * N_BUCKETS);

  // ---------------- AXI ----------------
  logic        wr_en, rd_req;
  logic [31:0] wr_addr, wr_data, rd_addr;
  logic        rd_ack;
  logic [31:0] rd_data;
  axil_to_reg u_axil (
    .clk, .rst_n, .s(s_axi),
    .wr_en, .wr_addr, .wr_data, .rd_req, .rd_addr, .rd_ack, .rd_data);

  logic [2:0] wwin;
  assign wwin = wr_addr[14:12];

  // ---------------- registers ----------------
  logic [15:0] s_pro, plen;
  logic [31:0] t_target;
  logic [AW-1:0] pre_level;

  // ---------------- sub-blocks ----------------
  logic        pr_lookup, pr_budget, pr_bdone;
  logic [7:0]  task_id;
  logic [15:0] n_pred;
  logic [31:0] t_dec;
  logic [31:0] t_pre_us, t_dec_us;
  logic [47:0] energy;
  token_predictor #(.N_TASKS(N_TASKS), .N_BUCKETS(N_BUCKETS)) u_pred (
    .clk, .rst_n,
    .lut_we(wr_en && wwin == 3'd2), .lut_addr(TW'(wr_addr[11:2])), .lut_data(wr_data[15:0]),
    .lookup(pr_lookup), .task_id, .prompt_len(plen), .n_pred,
    .budget(pr_budget), .t_target_us(t_target), .t_pre_us, .budget_done(pr_bdone), .t_dec_us(t_dec));

  logic               pol_start, pol_done;
  logic signed [15:0] pol_state [N_IN];
  logic [AW-1:0]      pol_action;
  dvfs_policy #(.N_IN(N_IN), .HIDDEN(HIDDEN), .N_ACT(N_ACT)) u_policy (
    .clk, .rst_n,
    .w_we(wr_en && wwin == 3'd1), .w_addr(PW'(wr_addr[11:2])), .w_data(wr_data[15:0]),
    .start(pol_start), .state_in(pol_state), .busy(), .done(pol_done),
    .action(pol_action), .q_best());

  logic          dv_req, dv_ack;
  logic [AW-1:0] dv_level_req, level;
  logic [15:0]   switches;
  logic [31:0]   settle;
  dvfs_controller #(.N_ACT(N_ACT)) u_ctrl (
    .clk, .rst_n,
    .tbl_we(wr_en && wwin == 3'd3), .tbl_addr(AW'(wr_addr[11:2])), .tbl_data(wr_data[15:0]),
    .req(dv_req), .level_req(dv_level_req), .busy(), .ack(dv_ack), .level,
    .vdd_code, .freq_code, .ldo_pg, .pll_lock, .switches, .settle_cycles(settle));

  energy_meter #(.N_ACT(N_ACT), .TICK_CYCLES(TICK_CYCLES)) u_meter (
    .clk, .rst_n,
    .lut_we(wr_en && wwin == 3'd4), .lut_addr((AW+1)'(wr_addr[11:2])), .lut_data(wr_data[15:0]),
    .clear(ctl_start), .phase, .level, .energy_nj(energy), .t_pre_us, .t_dec_us);

  // ---------------- event handling ----------------
  typedef enum logic [2:0] {E_IDLE, E_POLICY, E_APPLY, E_WAIT, E_SEND} ev_e;
  ev_e         ev;
  phase_e      phase_q;
  logic        budget_ok, pend_level;
  logic [AW-1:0] pend_target;
  logic [15:0] n_layer_evt, n_policy;
  logic [AW-1:0] last_action;
  logic        send_ack;       // answer with VF_ACK once applied

  function automatic logic signed [15:0] clamp15(input logic [31:0] v);
    return (v > 32'd32767) ? 16'sd32767 : 16'(v);
  endfunction

  assign rx_ready = (ev == E_IDLE) && !pend_level && !tx_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_pro <= '0; plen <= '0; t_target <= '0; pre_level <= AW'(N_ACT - 1);
      ctl_start <= 1'b0; ctl_first_token <= 1'b0; ctl_eos <= 1'b0;
      pr_lookup <= 1'b0; pr_budget <= 1'b0; task_id <= '0;
      pol_start <= 1'b0; dv_req <= 1'b0; dv_level_req <= '0;
      ev <= E_IDLE; phase_q <= PH_IDLE; budget_ok <= 1'b0; pend_level <= 1'b0; pend_target <= '0;
      n_layer_evt <= '0; n_policy <= '0; last_action <= '0; send_ack <= 1'b0;
      tx_valid <= 1'b0; tx_msg <= '0;
      for (int i = 0; i < N_IN; i++) pol_state[i] <= '0;
    end else begin
      ctl_start <= 1'b0; ctl_first_token <= 1'b0; ctl_eos <= 1'b0;
      pr_lookup <= 1'b0; pr_budget <= 1'b0; pol_start <= 1'b0; dv_req <= 1'b0;

      // host register writes
      if (wr_en && wwin == 3'd0) begin
        case (wr_addr[7:0])
          SFU_REG_CTRL: begin
            ctl_start       <= wr_data[0];
            ctl_first_token <= wr_data[1];
            ctl_eos         <= wr_data[2];
          end
          SFU_REG_SPRO:    s_pro     <= wr_data[15:0];
          SFU_REG_TTARGET: t_target  <= wr_data;
          SFU_REG_PLEN:    plen      <= wr_data[15:0];
          SFU_REG_PRELVL:  pre_level <= AW'(wr_data);
          default: ;
        endcase
      end

      // phase changes
      phase_q <= phase;
      if (phase != phase_q) begin
        case (phase)
          PH_PREFILL: begin pend_level <= 1'b1; pend_target <= pre_level; budget_ok <= 1'b0; end
          PH_DECODE:  pr_budget <= 1'b1;
          PH_IDLE:    begin pend_level <= 1'b1; pend_target <= '0; budget_ok <= 1'b0; end
          default: ;
        endcase
      end
      if (pr_bdone) budget_ok <= 1'b1;

      if (tx_valid && tx_ready) tx_valid <= 1'b0;

      case (ev)
        E_IDLE: begin
          if (pend_level) begin
            pend_level   <= 1'b0;
            dv_level_req <= pend_target;
            send_ack     <= 1'b0;
            ev           <= E_APPLY;
          end else if (rx_valid && rx_ready) begin
            if (rx_msg.mtype == MSG_ROUTE_DONE) begin
              task_id   <= rx_msg.payload[7:0];
              pr_lookup <= 1'b1;
            end else if (rx_msg.mtype == MSG_LAYER_DONE) begin
              logic [15:0] nl;
              nl = (rx_msg.payload >= 20'(N_LAYERS - 1)) ? 16'd0 : 16'(rx_msg.payload + 1);
              n_layer_evt <= n_layer_evt + 1'b1;
              send_ack    <= 1'b1;
              if (phase == PH_DECODE && budget_ok) begin
                pol_state[0] <= clamp15(32'(s_pro));
                pol_state[1] <= clamp15(t_pre_us >> 10);
                pol_state[2] <= clamp15(t_dec >> 10);
                pol_state[3] <= nl;
                pol_start    <= 1'b1;
                ev           <= E_POLICY;
              end else begin
                dv_level_req <= (phase == PH_DECODE) ? level : pre_level;
                ev           <= E_APPLY;
              end
            end
          end
        end
        E_POLICY: if (pol_done) begin
          dv_level_req <= pol_action;
          last_action  <= pol_action;
          n_policy     <= n_policy + 1'b1;
          ev           <= E_APPLY;
        end
        E_APPLY: begin
          dv_req <= 1'b1;
          ev     <= E_WAIT;
        end
        E_WAIT: if (dv_ack) begin
          if (send_ack) begin
            tx_valid <= 1'b1;
            tx_msg   <= '{mtype: MSG_VF_ACK, payload: 20'(level)};
            ev       <= E_SEND;
          end else ev <= E_IDLE;
        end
        E_SEND: if (!tx_valid || tx_ready) ev <= E_IDLE;
        default: ev <= E_IDLE;
      endcase
    end
  end

  // ---------------- register reads ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ack <= 1'b0; rd_data <= '0;
    end else begin
      rd_ack <= rd_req;
      if (rd_req) begin
        case (rd_addr[7:0])
          SFU_REG_SPRO:     rd_data <= 32'(s_pro);
          SFU_REG_TPRE:     rd_data <= t_pre_us;
          SFU_REG_TTARGET:  rd_data <= t_target;
          SFU_REG_PLEN:     rd_data <= 32'(plen);
          SFU_REG_STATUS:   rd_data <= {8'd0, requests, 4'(level), 1'b0, phase, ev != E_IDLE};
          SFU_REG_NPRED:    rd_data <= 32'(n_pred);
          SFU_REG_TDEC:     rd_data <= t_dec;
          SFU_REG_ENERGY_L: rd_data <= energy[31:0];
          SFU_REG_ENERGY_H: rd_data <= 32'(energy[47:32]);
          SFU_REG_VF:       rd_data <= {16'd0, freq_code, vdd_code};
          SFU_REG_NSWITCH:  rd_data <= 32'(switches);
          SFU_REG_NLAYER:   rd_data <= 32'(n_layer_evt);
          SFU_REG_PRELVL:   rd_data <= 32'(pre_level);
          SFU_REG_SETTLE:   rd_data <= settle;
          SFU_REG_ACTION:   rd_data <= 32'(last_action);
          SFU_REG_NPOLICY:  rd_data <= 32'(n_policy);
          SFU_REG_TDECM:    rd_data <= t_dec_us;
          default:          rd_data <= '0;
        endcase
        if (rd_addr[14:12] != 3'd0) rd_data <= '0;   // tables are write-only
      end
    end
  end
endmodule
