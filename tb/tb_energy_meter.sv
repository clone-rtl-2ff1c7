// tb_energy_meter: loads a random power table, then holds a sequence of
// (phase, level) settings, each for a whole number of ticks, and checks the energy
// sum (table power times ticks, prefill entries for WAKEUP and PREFILL, decode
// entries for DECODE, nothing for IDLE) and the prefill and decode time counters.
// `clear` must restart all three. The tick is shortened to 10 cycles.
module tb_energy_meter;
  import clone_pkg::*;
  localparam int NA = 16, TICK = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic lut_we, clear;
  logic [4:0] lut_addr;
  logic [15:0] lut_data;
  phase_e phase;
  logic [3:0] level;
  logic [47:0] energy_nj;
  logic [31:0] t_pre_us, t_dec_us;
  energy_meter #(.N_ACT(NA), .TICK_CYCLES(TICK)) dut (.*);

  logic [15:0] pl [2*NA];

  initial begin
    longint e;
    int tp, td;
    lut_we = 0; clear = 0; lut_addr = 0; lut_data = 0; phase = PH_IDLE; level = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int a = 0; a < 2*NA; a++) begin
      pl[a] = 16'(100 + $urandom % 3000);
      lut_we <= 1; lut_addr <= 5'(a); lut_data <= pl[a];
      @(posedge clk);
    end
    lut_we <= 0;
    for (int run = 0; run < 3; run++) begin
      clear <= 1;
      @(posedge clk);
      clear <= 0;
      e = 0; tp = 0; td = 0;
      for (int seg = 0; seg < 20; seg++) begin
        phase_e p; int lv, k;
        p = phase_e'(2'($urandom % 4)); lv = $urandom % NA; k = 1 + $urandom % 5;
        phase <= p; level <= 4'(lv);
        case (p)
          PH_WAKEUP, PH_PREFILL: begin e += longint'(pl[2*lv]) * k; tp += k; end
          PH_DECODE: begin e += longint'(pl[2*lv + 1]) * k; td += k; end
          default: ;
        endcase
        repeat (k * TICK) @(posedge clk);
      end
      phase <= PH_IDLE;
      #1;
      checks++;
      if (longint'(energy_nj) != e) begin failures++; $display("energy %0d want %0d", energy_nj, e); end
      checks++;
      if (int'(t_pre_us) != tp || int'(t_dec_us) != td) begin
        failures++; $display("times %0d/%0d want %0d/%0d", t_pre_us, t_dec_us, tp, td);
      end
    end
    clear <= 1;
    @(posedge clk);
    clear <= 0;
    #1;
    checks++;
    if (energy_nj != 0 || t_pre_us != 0 || t_dec_us != 0) begin failures++; $display("clear failed"); end
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
