// chip_ctrl: the chip controller's request-phase state machine.
//
// Each request walks IDLE -> WAKEUP -> PREFILL -> DECODE -> IDLE. In IDLE the LPU
// (its datapath, buffer and eNVM) is powered down; the eNVM keeps the adapters, so
// nothing needs reloading on wake-up. `start` powers the LPU up and enters WAKEUP,
// which lasts WAKE_CYCLES cycles; PREFILL follows. The host's `first_token` (the
// first output token exists) moves to DECODE and `eos` (end of sequence) back to
// IDLE. Commands that do not fit the present phase are ignored and counted in
// `bad_cmds`. `requests` counts completed requests. The phase names follow the
// paper's DVFS waveform labels; the state machine itself is this design's.
module chip_ctrl
  import clone_pkg::*;
#(
  parameter int unsigned WAKE_CYCLES = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        first_token,
  input  logic        eos,
  output phase_e      phase,
  output logic        lpu_pwr,
  output logic [15:0] requests,
  output logic [15:0] bad_cmds
);
  logic [$clog2(WAKE_CYCLES+1)-1:0] cnt;

  assign lpu_pwr = (phase != PH_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_IDLE; cnt <= '0; requests <= '0; bad_cmds <= '0;
    end else begin
      case (phase)
        PH_IDLE: begin
          if (start) begin phase <= PH_WAKEUP; cnt <= '0; end
          if (first_token || eos) bad_cmds <= bad_cmds + 1'b1;
        end
        PH_WAKEUP: begin
          if (cnt == ($clog2(WAKE_CYCLES+1))'(WAKE_CYCLES - 1)) phase <= PH_PREFILL;
          else cnt <= cnt + 1'b1;
          if (start || first_token || eos) bad_cmds <= bad_cmds + 1'b1;
        end
        PH_PREFILL: begin
          if (eos) begin phase <= PH_IDLE; requests <= requests + 1'b1; end
          else if (first_token) phase <= PH_DECODE;
          if (start) bad_cmds <= bad_cmds + 1'b1;
        end
        PH_DECODE: begin
          if (eos) begin phase <= PH_IDLE; requests <= requests + 1'b1; end
          if (start || first_token) bad_cmds <= bad_cmds + 1'b1;
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end
endmodule
