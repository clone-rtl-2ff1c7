// tb_ldo: steps the regulator model through random voltage codes and checks that
// the output moves towards the target by at most SLEW_MV per cycle, reaches it in
// ceil(|delta| / SLEW_MV) cycles, and that power-good is high exactly when the
// output sits on the target.
module tb_ldo;
  localparam int VMIN = 500, VSTEP = 5, SLEW = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] vdd_code;
  logic [11:0] vout_mv;
  logic pg;
  ldo #(.VMIN_MV(VMIN), .VSTEP_MV(VSTEP), .SLEW_MV(SLEW)) dut (.*);

  initial begin
    int tgt, prev, n, want;
    vdd_code = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    for (int k = 0; k < 40; k++) begin
      tgt = VMIN + VSTEP * (k == 0 ? 100 : int'($urandom % 120));
      prev = int'(vout_mv);
      want = (tgt > prev ? tgt - prev : prev - tgt);
      want = (want + SLEW - 1) / SLEW;
      vdd_code <= 8'((tgt - VMIN) / VSTEP);
      n = 0;
      @(posedge clk); #1;
      while (!pg) begin
        checks++;
        if ((int'(vout_mv) - prev > SLEW) || (prev - int'(vout_mv) > SLEW)) begin
          failures++; $display("slew exceeded: %0d -> %0d", prev, vout_mv);
        end
        prev = int'(vout_mv);
        n++;
        @(posedge clk); #1;
      end
      checks++;
      if (int'(vout_mv) != tgt) begin failures++; $display("settled at %0d want %0d", vout_mv, tgt); end
      checks++;
      if (n + 1 != want && !(want == 0 && n == 0)) begin failures++; $display("settle %0d cycles want %0d", n + 1, want); end
      repeat (2) @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
