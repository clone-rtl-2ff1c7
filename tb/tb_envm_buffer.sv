// tb_envm_buffer: checks the embedded non-volatile adapter store. Access before the
// wake-up delay has passed must raise err and be ignored; ready must rise exactly
// WAKE_CYCLES+1 cycles after power is applied; masked writes must change only the
// selected lanes; reads return data one cycle after re; and the contents must
// survive a power-off/power-on cycle (the property the design relies on to keep
// adapters on chip with the processors switched off).
module tb_envm_buffer;
  localparam int L = 8, W = 16, D = 256, WAKE = 16;
  localparam int AW = $clog2(D);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic pwr_on, ready, we, re, err;
  logic [L-1:0] wmask;
  logic [AW-1:0] waddr, raddr;
  logic [L*W-1:0] wdata, rdata;
  envm_buffer #(.LANES(L), .ELEM_W(W), .DEPTH(D), .WAKE_CYCLES(WAKE)) dut (.*);

  logic [L*W-1:0] model [D];
  int t0, t1, cyc = 0;
  always @(posedge clk) cyc++;

  task automatic power_up();
    pwr_on <= 1;
    t0 = cyc;
    do @(posedge clk); while (!ready);
    t1 = cyc;
    checks++;
    // ready is set on the (WAKE+1)th edge after pwr_on and sampled here one edge later
    if (t1 - t0 != WAKE + 2) begin failures++; $display("wake took %0d cycles, want %0d", t1 - t0 - 1, WAKE + 1); end
  endtask

  task automatic check_all();
    for (int a = 0; a < D; a++) begin
      re <= 1; raddr <= AW'(a);
      @(posedge clk); re <= 0;
      @(posedge clk);
      checks++;
      if (rdata != model[a]) begin failures++; $display("word %0d: got %h want %h", a, rdata, model[a]); end
    end
  endtask

  initial begin
    pwr_on = 0; we = 0; re = 0; wmask = 0; waddr = 0; raddr = 0; wdata = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // access while off: error flag
    we <= 1; wmask <= '1; waddr <= 0; wdata <= '1;
    @(posedge clk); we <= 0;
    @(posedge clk);
    checks++;
    if (!err) begin failures++; $display("no error for access while off"); end
    power_up();
    // full writes then random masked writes
    for (int a = 0; a < D; a++) begin
      model[a] = {$urandom, $urandom, $urandom, $urandom};
      we <= 1; wmask <= '1; waddr <= AW'(a); wdata <= model[a];
      @(posedge clk);
    end
    for (int n = 0; n < 300; n++) begin
      logic [L*W-1:0] d; logic [L-1:0] m; int a;
      d = {$urandom, $urandom, $urandom, $urandom}; m = L'($urandom); a = $urandom % D;
      we <= 1; wmask <= m; waddr <= AW'(a); wdata <= d;
      for (int l = 0; l < L; l++) if (m[l]) model[a][l*W +: W] = d[l*W +: W];
      @(posedge clk);
    end
    we <= 0;
    @(posedge clk);
    checks++;
    if (err) begin failures++; $display("error while ready"); end
    check_all();
    // power cycle: contents retained
    pwr_on <= 0;
    repeat (20) @(posedge clk);
    checks++;
    if (ready) begin failures++; $display("ready while off"); end
    power_up();
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
