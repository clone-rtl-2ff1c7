// tb_adpll: programs the PLL model with several frequency codes and checks that
// lock drops on a code change and returns after LOCK_CYCLES reference cycles, that
// the reported frequency is FSTEP_MHZ*code, and that the output clock period
// measured in simulated time matches 1000/f ns (within 1%).
module tb_adpll;
  localparam int FSTEP = 5, LOCKC = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;   // 100 MHz reference
  int checks = 0, failures = 0;

  logic [7:0] freq_code;
  logic clk_out, lock;
  logic [11:0] freq_mhz;
  adpll #(.FSTEP_MHZ(FSTEP), .LOCK_CYCLES(LOCKC)) dut (.*);

  initial begin
    int n;
    realtime t0, t1, per;
    freq_code = 8'd20;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 6; k++) begin
      int code;
      code = 10 + int'($urandom % 90);
      @(posedge clk);
      freq_code <= 8'(code);
      @(posedge clk); @(posedge clk); #1;
      checks++;
      if (lock) begin failures++; $display("lock did not drop"); end
      n = 1;
      while (!lock) begin @(posedge clk); #1; n++; end
      checks++;
      if (n != LOCKC) begin failures++; $display("lock after %0d cycles, want %0d", n, LOCKC); end
      checks++;
      if (int'(freq_mhz) != FSTEP * code) begin failures++; $display("freq %0d want %0d", freq_mhz, FSTEP * code); end
      @(posedge clk_out); t0 = $realtime;
      repeat (10) @(posedge clk_out);
      t1 = $realtime;
      per = (t1 - t0) / 10.0;
      checks++;
      if (per > 1.01 * 1000.0 / real'(FSTEP * code) || per < 0.99 * 1000.0 / real'(FSTEP * code)) begin
        failures++; $display("period %f ns for %0d MHz", per, FSTEP * code);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
