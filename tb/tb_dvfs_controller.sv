// tb_dvfs_controller: connects the controller to the LDO and ADPLL models and
// requests random levels (up, down and unchanged). Every cycle it checks the safety
// rule the sequencing exists for: the frequency in force never needs more supply
// than the regulator is delivering (the frequency code's table entry must have a
// voltage at or below the present output). After each acknowledge it checks the
// level, both codes against the table, and the switch counter; unchanged requests
// must be acknowledged within 2 cycles without a switch.
module tb_dvfs_controller;
  localparam int NA = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic tbl_we, req, busy, ack, ldo_pg, pll_lock, clk_out;
  logic [3:0] tbl_addr, level_req, level;
  logic [15:0] tbl_data, switches;
  logic [7:0] vdd_code, freq_code;
  logic [31:0] settle_cycles;
  logic [11:0] vout_mv, freq_mhz;
  dvfs_controller #(.N_ACT(NA), .GUARD(2)) dut (.*);
  ldo u_ldo (.clk, .rst_n, .vdd_code, .vout_mv, .pg(ldo_pg));
  adpll #(.LOCK_CYCLES(8)) u_pll (.clk, .rst_n, .freq_code, .clk_out, .lock(pll_lock), .freq_mhz);

  // reference table (reset contents)
  function automatic int vcode(int l); return 20 + 4 * l; endfunction
  function automatic int fcode(int l); return 50 + 5 * l; endfunction

  // armed once the supply has come up after reset
  int unsafe = 0;
  bit armed = 0;
  always @(posedge clk) if (armed) begin
    int need;
    need = -1;
    for (int l = 0; l < NA; l++) if (fcode(l) == int'(freq_code)) need = 500 + 5 * vcode(l);
    if (need > int'(vout_mv)) unsafe++;
  end

  initial begin
    int nsw, cur;
    tbl_we = 0; req = 0; tbl_addr = 0; level_req = 0; tbl_data = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (80) @(posedge clk);   // regulator and PLL settle at level 0
    armed = 1;
    nsw = 0; cur = 0;
    for (int n = 0; n < 40; n++) begin
      int lv, t;
      lv = (n % 5 == 4) ? cur : int'($urandom % NA);
      req <= 1; level_req <= 4'(lv);
      @(posedge clk);
      req <= 0;
      t = 0;
      while (!ack) begin @(posedge clk); t++; end
      #1;
      if (lv != cur) nsw++;
      else begin
        checks++;
        if (t > 2) begin failures++; $display("same-level ack after %0d cycles", t); end
      end
      cur = lv;
      checks++;
      if (int'(level) != lv || int'(vdd_code) != vcode(lv) || int'(freq_code) != fcode(lv) || int'(switches) != nsw) begin
        failures++; $display("after ack: level %0d vdd %0d freq %0d sw %0d (want %0d %0d %0d %0d)",
                             level, vdd_code, freq_code, switches, lv, vcode(lv), fcode(lv), nsw);
      end
      @(posedge clk);
    end
    checks++;
    if (unsafe != 0) begin failures++; $display("frequency ran ahead of voltage in %0d cycles", unsafe); end
    checks++;
    if (settle_cycles == 0) begin failures++; $display("no settle time counted"); end
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
