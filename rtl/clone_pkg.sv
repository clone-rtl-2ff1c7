// clone_pkg: types and constants shared by the CLONE accelerator blocks.
//
// The accelerator pairs a LoRA Processing Unit (LPU), which routes each request to a
// soft mixture of LoRA experts and applies the merged adapter to the host's layer
// outputs, with a Special Function Unit (SFU), which picks a voltage/frequency level
// for every transformer layer. The two exchange short messages over a bidirectional
// stream; the message layout below, the phase encoding and the register offsets are
// this design's own choices (the paper gives none of them).
package clone_pkg;

  // ---- LPU <-> SFU channel messages (24 bits: 4-bit type, 20-bit payload) ----
  typedef enum logic [3:0] {
    MSG_NONE       = 4'd0,
    MSG_ROUTE_DONE = 4'd1,  // LPU -> SFU, payload = dominant expert index
    MSG_LAYER_DONE = 4'd2,  // LPU -> SFU, payload = index of the layer just finished
    MSG_VF_ACK     = 4'd3   // SFU -> LPU, payload = V/F level now applied
  } msg_type_e;

  typedef struct packed {
    msg_type_e   mtype;
    logic [19:0] payload;
  } chan_msg_t;

  localparam int unsigned MSG_W = $bits(chan_msg_t);

  // ---- request phase, as driven by the chip controller ----
  typedef enum logic [1:0] {
    PH_IDLE    = 2'd0,
    PH_WAKEUP  = 2'd1,
    PH_PREFILL = 2'd2,
    PH_DECODE  = 2'd3
  } phase_e;

  // ---- LPU register partition (byte offsets, address bit 31 = 0) ----
  // bits [30:29] select: 00 registers, 01 PUB window, 10 eNVM window
  localparam logic [7:0] LPU_REG_CMD     = 8'h00;  // W: 1 = ROUTE, 2 = LORA
  localparam logic [7:0] LPU_REG_STATUS  = 8'h04;  // R: {.., vf_level[7:4], err, done, busy}
  localparam logic [7:0] LPU_REG_LAYER   = 8'h08;  // RW: layer index sent with LAYER_DONE
  localparam logic [7:0] LPU_REG_TOP     = 8'h0C;  // R: dominant expert index
  localparam logic [7:0] LPU_REG_CYCLES  = 8'h10;  // R: cycles taken by last command
  localparam logic [7:0] LPU_REG_OMEGA0  = 8'h40;  // R: omega[j] at 0x40 + 4*j

  localparam logic [3:0] LPU_CMD_ROUTE = 4'd1;
  localparam logic [3:0] LPU_CMD_LORA  = 4'd2;

  // ---- SFU register partition (byte offsets, address bit 31 = 1) ----
  // bits [14:12] select: 0 registers, 1 MLP weights, 2 predictor LUT,
  //                      3 action table, 4 power LUT
  localparam logic [7:0] SFU_REG_CTRL     = 8'h00;  // W: bit0 start, bit1 first_token, bit2 eos
  localparam logic [7:0] SFU_REG_SPRO     = 8'h04;  // RW: co-running processor intensity
  localparam logic [7:0] SFU_REG_TPRE     = 8'h08;  // R: measured prefill time (us)
  localparam logic [7:0] SFU_REG_TTARGET  = 8'h0C;  // RW: end-to-end latency target (us)
  localparam logic [7:0] SFU_REG_PLEN     = 8'h10;  // RW: prompt length (tokens)
  localparam logic [7:0] SFU_REG_STATUS   = 8'h14;  // R: {requests[23:8], level[7:4], phase[2:1], busy}
  localparam logic [7:0] SFU_REG_NPRED    = 8'h18;  // R: predicted output tokens
  localparam logic [7:0] SFU_REG_TDEC     = 8'h1C;  // R: per-token decode budget (us)
  localparam logic [7:0] SFU_REG_ENERGY_L = 8'h20;  // R: energy accumulator [31:0]
  localparam logic [7:0] SFU_REG_ENERGY_H = 8'h24;  // R: energy accumulator [47:32]
  localparam logic [7:0] SFU_REG_VF       = 8'h28;  // R: {freq_code, vdd_code}
  localparam logic [7:0] SFU_REG_NSWITCH  = 8'h2C;  // R: number of V/F changes applied
  localparam logic [7:0] SFU_REG_NLAYER   = 8'h30;  // R: layer boundaries handled
  localparam logic [7:0] SFU_REG_PRELVL   = 8'h34;  // RW: V/F level used in prefill
  localparam logic [7:0] SFU_REG_SETTLE   = 8'h38;  // R: cycles spent settling LDO/PLL
  localparam logic [7:0] SFU_REG_ACTION   = 8'h3C;  // R: last level chosen by the policy
  localparam logic [7:0] SFU_REG_NPOLICY  = 8'h40;  // R: policy evaluations
  localparam logic [7:0] SFU_REG_TDECM    = 8'h44;  // R: measured decode time (us)

  // saturate a wide signed value to 16 bits
  function automatic logic signed [15:0] sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sd32767;
    else if (v < -48'sd32768) return -16'sd32768;
    else                      return v[15:0];
  endfunction

endpackage
