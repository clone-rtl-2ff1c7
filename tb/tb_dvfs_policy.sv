// tb_dvfs_policy: loads random Q8.8 weights into the MLP policy at its default size
// (4 inputs, 32 hidden units, 16 actions: 688 parameters), evaluates random states
// and compares the chosen action and its Q-value with an integer reference of
// h = ReLU(sat((W1 s + (b1 << 8)) >> 8)), Q = W2 h + (b2 << 8), argmax (lowest index
// on ties). One case zeroes W2 so that every Q-value ties. Also checks the latency
// HIDDEN*(N_IN+1) + N_ACT*(HIDDEN+1) + 2 cycles.
module tb_dvfs_policy;
  localparam int NI = 4, H = 32, NA = 16;
  localparam int NP = NI*H + H + H*NA + NA;
  localparam int PW = $clog2(NP);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic w_we, start, busy, done;
  logic [PW-1:0] w_addr;
  logic signed [15:0] w_data;
  logic signed [15:0] state_in [NI];
  logic [3:0] action;
  logic signed [47:0] q_best;
  dvfs_policy #(.N_IN(NI), .HIDDEN(H), .N_ACT(NA)) dut (.*);

  logic signed [15:0] w [NP];

  initial begin
    w_we = 0; start = 0; w_addr = 0; w_data = 0;
    for (int i = 0; i < NI; i++) state_in[i] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int trial = 0; trial < 12; trial++) begin
      longint acc, hh [H], q, best;
      int ba, t;
      for (int p = 0; p < NP; p++) begin
        w[p] = 16'(int'($urandom % 1024) - 512);
        if (trial == 5 && p >= NI*H + H) w[p] = 16'sd0;
        w_we <= 1; w_addr <= PW'(p); w_data <= w[p];
        @(posedge clk);
      end
      w_we <= 0;
      for (int i = 0; i < NI; i++) state_in[i] <= 16'(int'($urandom % 400) - 200);
      @(posedge clk);
      // reference
      for (int hu = 0; hu < H; hu++) begin
        acc = 0;
        for (int i = 0; i < NI; i++) acc += longint'(w[hu*NI + i]) * longint'(state_in[i]);
        acc = (acc + (longint'(w[NI*H + hu]) <<< 8)) >>> 8;
        hh[hu] = (acc < 0) ? 0 : (acc > 32767 ? 32767 : acc);
      end
      ba = 0; best = 0;
      for (int a = 0; a < NA; a++) begin
        q = longint'(w[NI*H + H + H*NA + a]) <<< 8;
        for (int hu = 0; hu < H; hu++) q += longint'(w[NI*H + H + a*H + hu]) * hh[hu];
        if (a == 0 || q > best) begin best = q; ba = a; end
      end
      start <= 1;
      @(posedge clk);
      start <= 0;
      t = 0;
      while (!done) begin @(posedge clk); t++; end
      #1;
      checks++;
      if (t != H*(NI+1) + NA*(H+1) + 2) begin failures++; $display("latency %0d want %0d", t, H*(NI+1) + NA*(H+1) + 2); end
      checks++;
      if (int'(action) != ba || longint'(q_best) != best) begin
        failures++; $display("trial %0d: action %0d q %0d, want %0d q %0d", trial, action, q_best, ba, best);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
