// tb_chip_ctrl: walks the chip controller through complete requests
// (IDLE -> WAKEUP -> PREFILL -> DECODE -> IDLE), an early end in PREFILL, and
// out-of-order commands. It checks the wake-up delay in cycles, that the processor
// power enable follows the phase, that the request counter counts finished requests
// and that commands arriving in the wrong phase are counted and ignored.
module tb_chip_ctrl;
  import clone_pkg::*;
  localparam int WAKE = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, first_token, eos, lpu_pwr;
  phase_e phase;
  logic [15:0] requests, bad_cmds;
  chip_ctrl #(.WAKE_CYCLES(WAKE)) dut (.*);

  // one-cycle command pulse: 0 = start, 1 = first_token, 2 = eos
  task automatic pulse(int which);
    start <= (which == 0); first_token <= (which == 1); eos <= (which == 2);
    @(posedge clk);
    start <= 0; first_token <= 0; eos <= 0;
    @(posedge clk); #1;
  endtask

  task automatic expect_phase(phase_e p, string what);
    checks++;
    if (phase != p || lpu_pwr != (p != PH_IDLE)) begin
      failures++; $display("%s: phase %0d pwr %b, want %0d", what, phase, lpu_pwr, p);
    end
  endtask

  initial begin
    int n;
    start = 0; first_token = 0; eos = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    expect_phase(PH_IDLE, "after reset");
    // bad commands in IDLE
    pulse(2); pulse(1);
    expect_phase(PH_IDLE, "ignored in idle");
    // full request
    start <= 1; @(posedge clk); start <= 0; #1;
    expect_phase(PH_WAKEUP, "after start");
    n = 0;
    while (phase == PH_WAKEUP) begin @(posedge clk); #1; n++; end
    checks++;
    if (n != WAKE) begin failures++; $display("wake-up took %0d cycles", n); end
    expect_phase(PH_PREFILL, "after wake");
    pulse(0);                         // bad in prefill
    expect_phase(PH_PREFILL, "start ignored in prefill");
    pulse(1);
    expect_phase(PH_DECODE, "first token");
    pulse(1);                   // bad in decode
    expect_phase(PH_DECODE, "repeat first token ignored");
    pulse(2);
    expect_phase(PH_IDLE, "end of sequence");
    // request that ends during prefill
    pulse(0);
    repeat (WAKE) @(posedge clk); #1;
    expect_phase(PH_PREFILL, "second wake");
    pulse(2);
    expect_phase(PH_IDLE, "eos in prefill");
    checks++;
    if (requests != 16'd2) begin failures++; $display("requests %0d", requests); end
    checks++;
    if (bad_cmds != 16'd4) begin failures++; $display("bad commands %0d", bad_cmds); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
