// energy_meter: the SFU's power lookup table and energy/time accounting.
//
// The reward of the paper's DVFS learner is the request energy
//     R_energy = sum_f ( P_DEC^f * T_DEC + P_PRE^f * T_PRE ),
// where the power of each frequency level in the prefill and the decode phase comes
// from measurements kept in a lookup table. This block holds that table (host
// written, milliwatts, entry level*2 + {0: prefill, 1: decode}) and integrates it:
// every TICK_CYCLES clock cycles (one microsecond at the default 100 MHz clock) it
// adds the table entry of the present level and phase to a 48-bit energy
// accumulator (mW * us = nJ), and advances the prefill or decode time counter. The
// wake-up phase is charged at prefill power; idle time is not charged. `clear`
// restarts all counters for a new request. Units and tick length are this
// design's choices.
module energy_meter
  import clone_pkg::*;
#(
  parameter int unsigned N_ACT       = 16,
  parameter int unsigned TICK_CYCLES = 100,
  localparam int unsigned AW         = (N_ACT > 1) ? $clog2(N_ACT) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          lut_we,
  input  logic [AW:0]   lut_addr,
  input  logic [15:0]   lut_data,
  input  logic          clear,
  input  phase_e        phase,
  input  logic [AW-1:0] level,
  output logic [47:0]   energy_nj,
  output logic [31:0]   t_pre_us,
  output logic [31:0]   t_dec_us
);
  logic [15:0] p_lut [2 * N_ACT];
  logic [$clog2(TICK_CYCLES+1)-1:0] tick_cnt;
  logic tick;

  always_ff @(posedge clk) if (lut_we) p_lut[lut_addr] <= lut_data;

  assign tick = (tick_cnt == ($clog2(TICK_CYCLES+1))'(TICK_CYCLES - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tick_cnt <= '0; energy_nj <= '0; t_pre_us <= '0; t_dec_us <= '0;
    end else if (clear) begin
      tick_cnt <= '0; energy_nj <= '0; t_pre_us <= '0; t_dec_us <= '0;
    end else begin
      tick_cnt <= tick ? '0 : tick_cnt + 1'b1;
      if (tick) begin
        case (phase)
          PH_WAKEUP, PH_PREFILL: begin
            energy_nj <= energy_nj + 48'(p_lut[{level, 1'b0}]);
            t_pre_us  <= t_pre_us + 1;
          end
          PH_DECODE: begin
            energy_nj <= energy_nj + 48'(p_lut[{level, 1'b1}]);
            t_dec_us  <= t_dec_us + 1;
          end
          default: ;
        endcase
      end
    end
  end
endmodule
