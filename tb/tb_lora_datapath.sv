// tb_lora_datapath: runs the mixture-of-LoRA datapath on random x, y, A_j, B_j and
// gate weights held in synchronous memory models laid out as the block expects,
// and compares every written y' element with an exact integer reference of
//   u = sat(A x >> FRAC), v = (u * omega_j) >> 16,
//   y' = sat(y + ((B v << LORA_SHIFT) >> FRAC)).
// It also checks that each y element is written exactly once and that the pass
// takes NR*D/LANES + D*NR/LANES + 3 cycles (one memory read per cycle). One run
// uses large values so the saturation paths are exercised.
module tb_lora_datapath;
  localparam int D = 32, R = 2, N = 4, L = 8, FRAC = 8, SH = 1;
  localparam int NR = N * R;
  localparam int RA = 11, AW = 17, EA = RA + 3;
  localparam int AW0 = 0, BW0 = NR * D / L;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, rd_en, y_we;
  logic [15:0] omega [N];
  logic [RA-1:0] pub_row;
  logic [AW-1:0] envm_addr;
  logic [L*16-1:0] pub_rdata, envm_rdata;
  logic [EA-1:0] y_addr;
  logic [15:0] y_data;
  logic [31:0] cycles;
  lora_datapath #(.D_MODEL(D), .RANK(R), .N_EXPERTS(N), .LANES(L), .FRAC(FRAC), .LORA_SHIFT(SH),
                  .PUB_RA(RA), .ENVM_AW(AW), .X_ROW0(11'd0), .Y_ELEM0(14'(D)),
                  .A_WORD0(17'(AW0)), .B_WORD0(17'(BW0))) dut (.*);

  logic signed [15:0] pub [2*D];
  logic signed [15:0] A [NR][D];
  logic signed [15:0] B [D][NR];
  logic signed [15:0] yref [D];
  int nwrites [D];

  always @(posedge clk) begin
    if (rd_en) for (int l = 0; l < L; l++) begin
      int w;
      pub_rdata[l*16 +: 16] <= pub[(int'(pub_row)*L + l) % (2*D)];
      w = int'(envm_addr);
      if (w < BW0) envm_rdata[l*16 +: 16] <= A[w / (D/L)][(w % (D/L))*L + l];
      else         envm_rdata[l*16 +: 16] <= B[(w - BW0) / (NR/L > 0 ? NR/L : 1)][((w - BW0) % (NR/L > 0 ? NR/L : 1))*L + l];
    end
    if (y_we) begin
      pub[int'(y_addr)] <= y_data;
      if (int'(y_addr) >= D && int'(y_addr) < 2*D) nwrites[int'(y_addr) - D]++;
    end
  end

  function automatic logic signed [15:0] sat(longint v);
    if (v > 32767) return 16'sd32767;
    if (v < -32768) return -16'sd32768;
    return 16'(v);
  endfunction

  task automatic run_case(int amp_x, int amp_w);
    longint acc;
    logic signed [15:0] u, v [NR];
    int t;
    for (int k = 0; k < D; k++) begin
      pub[k] = 16'(int'($urandom % (2*amp_x)) - amp_x);
      pub[D + k] = 16'(int'($urandom % (2*amp_x)) - amp_x);
      nwrites[k] = 0;
    end
    for (int q = 0; q < NR; q++) for (int k = 0; k < D; k++) A[q][k] = 16'(int'($urandom % (2*amp_w)) - amp_w);
    for (int m = 0; m < D; m++) for (int q = 0; q < NR; q++) B[m][q] = 16'(int'($urandom % (2*amp_w)) - amp_w);
    for (int j = 0; j < N; j++) omega[j] = 16'($urandom);
    // reference
    for (int q = 0; q < NR; q++) begin
      acc = 0;
      for (int k = 0; k < D; k++) acc += longint'(A[q][k]) * longint'(pub[k]);
      u = sat(acc >>> FRAC);
      v[q] = 16'((longint'(u) * longint'(omega[q / R])) >>> 16);
    end
    for (int m = 0; m < D; m++) begin
      acc = 0;
      for (int q = 0; q < NR; q++) acc += longint'(B[m][q]) * longint'(v[q]);
      yref[m] = sat(longint'(pub[D + m]) + ((acc <<< SH) >>> FRAC));
    end
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    // t = cycles from the edge that samples start to the edge that raises done
    t = 0;
    while (!done) begin @(posedge clk); t++; end
    @(posedge clk);
    checks++;
    if (t != NR*D/L + D*NR/L + 3) begin failures++; $display("pass took %0d cycles, want %0d", t, NR*D/L + D*NR/L + 3); end
    checks++;
    if (int'(cycles) < t - 1 || int'(cycles) > t + 1) begin failures++; $display("cycles reports %0d, measured %0d", cycles, t); end
    for (int m = 0; m < D; m++) begin
      checks++;
      if (pub[D + m] != yref[m] || nwrites[m] != 1) begin
        failures++; $display("y'[%0d] = %0d want %0d (written %0d times)", m, pub[D + m], yref[m], nwrites[m]);
      end
    end
  endtask

  initial begin
    start = 0; pub_rdata = '0; envm_rdata = '0;
    for (int j = 0; j < N; j++) omega[j] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    run_case(1024, 128);
    run_case(300, 60);
    run_case(30000, 30000);    // saturating
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
