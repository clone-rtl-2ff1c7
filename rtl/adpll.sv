// adpll: behavioural model of the all-digital PLL that clocks the processors (its
// digitally controlled oscillator is not logic; this model is not for synthesis).
//
// clk_out toggles with a period of 1000 / (FSTEP_MHZ*freq_code) ns, made by a delay
// loop (delays are written in ns, so compile with a 1ns/1ps time scale); code 0
// stops the clock. When freq_code changes, `lock` falls on
// the next reference-clock edge and rises again LOCK_CYCLES reference cycles later.
// `freq_mhz` reports the programmed output frequency. Step size and lock time are
// assumptions; the paper only names the ADPLL. The half-period delay is computed
// from the code at run time, so lint cannot prove it non-zero; it is at least
// 500/(FSTEP_MHZ*255) ns, and code 0 takes the separate 1 us idle branch.
module adpll #(
  parameter int unsigned FSTEP_MHZ   = 5,
  parameter int unsigned LOCK_CYCLES = 32
) (
  input  logic        clk,        // reference clock
  input  logic        rst_n,
  input  logic [7:0]  freq_code,
  output logic        clk_out,
  output logic        lock,
  output logic [11:0] freq_mhz
);
  logic [7:0] code_q;
  logic [$clog2(LOCK_CYCLES+1)-1:0] cnt;

  assign freq_mhz = 12'(FSTEP_MHZ * int'(code_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code_q <= '0;
      cnt    <= '0;
      lock   <= 1'b0;
    end else if (freq_code != code_q) begin
      code_q <= freq_code;
      cnt    <= '0;
      lock   <= 1'b0;
    end else if (!lock) begin
      if (cnt == ($clog2(LOCK_CYCLES+1))'(LOCK_CYCLES - 1)) lock <= 1'b1;
      else cnt <= cnt + 1'b1;
    end
  end

  // oscillator
  initial clk_out = 1'b0;
  always begin
    if (code_q == '0) begin
      clk_out = 1'b0;
      #1000;
    end else begin
      #(500.0 / real'(FSTEP_MHZ * int'(code_q)));
      clk_out = ~clk_out;
    end
  end
endmodule
