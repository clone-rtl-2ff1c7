// ldo: behavioural model of the fast-switching low-dropout regulator that supplies
// the processors (an analog block; this model is not meant for synthesis).
//
// The output vout_mv moves toward VMIN_MV + VSTEP_MV*vdd_code by at most SLEW_MV
// per cycle of the reference clock and `pg` (power good) is high while the output
// sits at the target. The step sizes and slew are assumptions; the paper names the
// regulator and says only that it switches fast.
module ldo #(
  parameter int unsigned VMIN_MV  = 500,
  parameter int unsigned VSTEP_MV = 5,
  parameter int unsigned SLEW_MV  = 10
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  vdd_code,
  output logic [11:0] vout_mv,
  output logic        pg
);
  logic [11:0] target;
  assign target = 12'(VMIN_MV + VSTEP_MV * int'(vdd_code));
  assign pg     = (vout_mv == target);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vout_mv <= 12'(VMIN_MV);
    else if (vout_mv + 12'(SLEW_MV) < target) vout_mv <= vout_mv + 12'(SLEW_MV);
    else if (vout_mv > target + 12'(SLEW_MV)) vout_mv <= vout_mv - 12'(SLEW_MV);
    else vout_mv <= target;
  end
endmodule
