// dvfs_controller: applies a voltage/frequency level to the LDO and the ADPLL.
//
// A level (0 .. N_ACT-1) is mapped through the action table to an LDO code and an
// ADPLL code. A request for the level already in force is acknowledged the next
// cycle. Otherwise the change is sequenced so the logic is never clocked faster
// than its supply allows: going up, the voltage is raised first and the frequency
// only after the LDO reports power-good; going down, the frequency is lowered first
// and the voltage after the PLL reports lock. After each code change the
// controller waits GUARD cycles before it looks at power-good or lock, so it cannot
// see the status of the old setting. `ack` pulses when the new level is in force;
// `switches` counts applied changes and `settle_cycles` the cycles spent waiting.
// The table is host-writable, {freq_code, vdd_code} per entry; its reset contents
// span 250 .. 625 MHz (freq_code = 50 + 5*level at 5 MHz per step) and
// 0.60 .. 0.90 V (vdd_code = 20 + 4*level at 5 mV per step above 0.5 V). The
// ordering rule and the table are this design's; the paper states only that the
// SFU drives an LDO and an ADPLL.
module dvfs_controller #(
  parameter int unsigned N_ACT = 16,
  parameter int unsigned GUARD = 2,
  localparam int unsigned AW   = (N_ACT > 1) ? $clog2(N_ACT) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          tbl_we,
  input  logic [AW-1:0] tbl_addr,
  input  logic [15:0]   tbl_data,
  input  logic          req,
  input  logic [AW-1:0] level_req,
  output logic          busy,
  output logic          ack,
  output logic [AW-1:0] level,
  output logic [7:0]    vdd_code,
  output logic [7:0]    freq_code,
  input  logic          ldo_pg,
  input  logic          pll_lock,
  output logic [15:0]   switches,
  output logic [31:0]   settle_cycles
);
  logic [15:0] tbl [N_ACT];

  typedef enum logic [2:0] {S_IDLE, S_V1, S_F1, S_F2, S_V2, S_ACK} state_e;
  state_e st;
  logic [AW-1:0] tgt;
  logic [$clog2(GUARD+1)-1:0] guard;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_ACT; i++)
        tbl[i] <= {8'(50 + 5 * i), 8'(20 + 4 * i)};
      st <= S_IDLE; busy <= 1'b0; ack <= 1'b0; level <= '0; tgt <= '0; guard <= '0;
      vdd_code <= 8'd20; freq_code <= 8'd50; switches <= '0; settle_cycles <= '0;
    end else begin
      ack <= 1'b0;
      if (tbl_we) tbl[tbl_addr] <= tbl_data;
      if (guard != 0) guard <= guard - 1'b1;
      if (st != S_IDLE && st != S_ACK) settle_cycles <= settle_cycles + 1;
      case (st)
        S_IDLE: if (req) begin
          busy <= 1'b1;
          tgt  <= level_req;
          if (level_req == level) st <= S_ACK;
          else if (level_req > level) begin
            vdd_code <= tbl[level_req][7:0];  guard <= ($clog2(GUARD+1))'(GUARD); st <= S_V1;
          end else begin
            freq_code <= tbl[level_req][15:8]; guard <= ($clog2(GUARD+1))'(GUARD); st <= S_F2;
          end
        end
        // going up: voltage first, then frequency
        S_V1: if (guard == 0 && ldo_pg) begin
          freq_code <= tbl[tgt][15:8]; guard <= ($clog2(GUARD+1))'(GUARD); st <= S_F1;
        end
        S_F1: if (guard == 0 && pll_lock) begin
          level <= tgt; switches <= switches + 1'b1; st <= S_ACK;
        end
        // going down: frequency first, then voltage
        S_F2: if (guard == 0 && pll_lock) begin
          vdd_code <= tbl[tgt][7:0]; guard <= ($clog2(GUARD+1))'(GUARD); st <= S_V2;
        end
        S_V2: if (guard == 0 && ldo_pg) begin
          level <= tgt; switches <= switches + 1'b1; st <= S_ACK;
        end
        S_ACK: begin
          ack  <= 1'b1;
          busy <= 1'b0;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
