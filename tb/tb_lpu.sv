// tb_lpu: exercises the LoRA Processing Unit through its AXI4-Lite port at a
// reduced size (D_MODEL 32, rank 2, 4 experts, 32-element embeddings).
// The host loads the adapters and expert embeddings into the eNVM window and x, y
// and the prompt embedding into the PUB window, runs ROUTE and LORA, and the test
// checks: gate weights and dominant expert against a floating-point reference;
// every y' element against an exact integer reference built with the gate weights
// read back; the ROUTE_DONE and LAYER_DONE messages (with a stalled SFU side, so
// the unit must hold its message); VF_ACK messages updating STATUS; refusal (and the
// error flag) of a window write while a command runs; the LORA cycle count
// 2*NR*D/LANES + 3; and that the eNVM contents survive a power cycle.
module tb_lpu;
  import clone_pkg::*;
  localparam int D = 32, R = 2, N = 4, E = 32, L = 8, FRAC = 8;
  localparam int NR = N * R;
  localparam logic [31:0] PUBW = 32'h2000_0000, ENVW = 32'h4000_0000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_lite_if hs ();
  logic pwr_on, tx_valid, tx_ready, rx_valid, rx_ready;
  chan_msg_t tx_msg, rx_msg;
  lpu #(.D_MODEL(D), .RANK(R), .N_EXPERTS(N), .EMB_DIM(E), .LANES(L), .FRAC(FRAC)) dut (
    .clk, .rst_n, .s_axi(hs), .pwr_on, .tx_valid, .tx_ready, .tx_msg, .rx_valid, .rx_ready, .rx_msg);

  `include "axil_host_tasks.svh"

  logic signed [15:0] x [D], y [D], gx [E];
  logic signed [15:0] A [NR][D], B [D][NR], gj [N][E];

  // element writes: two elements per 32-bit word
  task automatic win_write(logic [31:0] base, int elem, logic [15:0] lo, logic [15:0] hi);
    axi_write(base | 32'(elem * 2), {hi, lo});
  endtask

  task automatic wait_done(output int cyc);
    logic [31:0] st;
    cyc = 0;
    do begin axi_read(32'h04, st); cyc++; end while (st[0] || !st[1]);
  endtask

  function automatic logic signed [15:0] sat(longint v);
    if (v > 32767) return 16'sd32767;
    if (v < -32768) return -16'sd32768;
    return 16'(v);
  endfunction

  // message monitor with a randomly stalling SFU side
  int n_route_msg = 0, n_layer_msg = 0, last_payload = -1, n_stall = 0;
  // the SFU side is ready one cycle in eight (changed on the falling edge)
  int cyc_n = 0;
  assign tx_ready = (cyc_n % 8) == 0;
  always @(negedge clk) cyc_n++;
  always @(posedge clk) begin
    if (tx_valid && !tx_ready) n_stall++;
    if (tx_valid && tx_ready) begin
      last_payload = int'(tx_msg.payload);
      if (tx_msg.mtype == MSG_ROUTE_DONE) n_route_msg++;
      if (tx_msg.mtype == MSG_LAYER_DONE) n_layer_msg++;
    end
  end

  initial begin
    logic [31:0] d;
    real cs [N], ex [N], sum, best;
    int bi, cyc;
    logic [15:0] om [N];
    axi_init();
    pwr_on = 0; rx_valid = 0; rx_msg = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    pwr_on <= 1;
    do axi_read(32'h04, d); while (!d[3]);
    // ---- data ----
    for (int k = 0; k < D; k++) begin x[k] = 16'(int'($urandom % 2048) - 1024); y[k] = 16'(int'($urandom % 2048) - 1024); end
    for (int i = 0; i < E; i++) gx[i] = 16'(int'($urandom % 4000) - 2000);
    for (int q = 0; q < NR; q++) for (int k = 0; k < D; k++) A[q][k] = 16'(int'($urandom % 256) - 128);
    for (int m = 0; m < D; m++) for (int q = 0; q < NR; q++) B[m][q] = 16'(int'($urandom % 256) - 128);
    for (int j = 0; j < N; j++) for (int i = 0; i < E; i++) gj[j][i] = 16'(int'($urandom % 4000) - 2000);
    for (int i = 0; i < E; i++) gj[2][i] = 16'(int'(gx[i]) + int'($urandom % 400) - 200);
    // ---- load eNVM: A, B, embeddings ----
    for (int q = 0; q < NR; q++) for (int k = 0; k < D; k += 2) win_write(ENVW, q*D + k, A[q][k], A[q][k+1]);
    for (int m = 0; m < D; m++) for (int q = 0; q < NR; q += 2) win_write(ENVW, NR*D + m*NR + q, B[m][q], B[m][q+1]);
    for (int j = 0; j < N; j++) for (int i = 0; i < E; i += 2) win_write(ENVW, 2*NR*D + j*E + i, gj[j][i], gj[j][i+1]);
    // ---- power cycle: the eNVM keeps its contents ----
    pwr_on <= 0;
    repeat (10) @(posedge clk);
    axi_write(PUBW, 32'h1);          // refused: memory asleep
    axi_read(32'h04, d);
    checks++;
    if (!d[2]) begin failures++; $display("access while asleep not flagged"); end
    axi_write(32'h04, 32'h0);        // clear error
    pwr_on <= 1;
    do axi_read(32'h04, d); while (!d[3]);
    for (int i = 0; i < 6; i++) begin
      int q, k;
      q = $urandom % NR; k = 2 * ($urandom % (D/2));
      axi_read(ENVW | 32'((q*D + k) * 2), d);
      checks++;
      if (d != {A[q][k+1], A[q][k]}) begin failures++; $display("eNVM lost A[%0d][%0d]", q, k); end
    end
    // ---- load PUB ----
    for (int k = 0; k < D; k += 2) win_write(PUBW, k, x[k], x[k+1]);
    for (int k = 0; k < D; k += 2) win_write(PUBW, D + k, y[k], y[k+1]);
    for (int i = 0; i < E; i += 2) win_write(PUBW, 2*D + i, gx[i], gx[i+1]);
    // ---- ROUTE ----
    axi_write(32'h00, 32'(LPU_CMD_ROUTE));
    wait_done(cyc);
    sum = 0; best = -2; bi = 0;
    for (int j = 0; j < N; j++) begin
      real dt, nx, nj;
      dt = 0; nx = 0; nj = 0;
      for (int i = 0; i < E; i++) begin dt += real'(gx[i]) * real'(gj[j][i]); nx += real'(gx[i])**2; nj += real'(gj[j][i])**2; end
      cs[j] = dt / ($sqrt(nx) * $sqrt(nj));
      if (cs[j] > best) begin best = cs[j]; bi = j; end
      ex[j] = $exp(cs[j]); sum += ex[j];
    end
    for (int j = 0; j < N; j++) begin
      axi_read(32'h40 + 32'(4*j), d);
      om[j] = d[15:0];
      checks++;
      if (real'(om[j]) / 65536.0 - ex[j] / sum > 1e-2 || ex[j] / sum - real'(om[j]) / 65536.0 > 1e-2) begin
        failures++; $display("omega[%0d] %f want %f", j, real'(om[j]) / 65536.0, ex[j] / sum);
      end
    end
    axi_read(32'h0C, d);
    checks++;
    if (int'(d) != bi) begin failures++; $display("top %0d want %0d", d, bi); end
    repeat (20) @(posedge clk);
    checks++;
    if (n_route_msg != 1 || last_payload != bi) begin failures++; $display("ROUTE_DONE message missing or wrong"); end
    // ---- LORA, with a write attempted while it runs ----
    axi_write(32'h08, 32'd7);        // layer index
    axi_write(32'h00, 32'(LPU_CMD_LORA));
    axi_write(PUBW | 32'(2*D), 32'hffff_ffff);   // must be refused
    axi_read(32'h04, d);
    checks++;
    if (!d[2] || !d[0]) begin failures++; $display("write during LORA not refused (status %h)", d); end
    wait_done(cyc);
    axi_read(32'h10, d);
    checks++;
    if (int'(d) < 2*NR*D/L + 1 || int'(d) > 2*NR*D/L + 3) begin failures++; $display("LORA cycles %0d", d); end
    begin
      longint acc;
      logic signed [15:0] u, v [NR];
      for (int q = 0; q < NR; q++) begin
        acc = 0;
        for (int k = 0; k < D; k++) acc += longint'(A[q][k]) * longint'(x[k]);
        u = sat(acc >>> FRAC);
        v[q] = 16'((longint'(u) * longint'(om[q / R])) >>> 16);
      end
      for (int m = 0; m < D; m += 2) begin
        logic signed [15:0] r0, r1;
        acc = 0; for (int q = 0; q < NR; q++) acc += longint'(B[m][q]) * longint'(v[q]);
        r0 = sat(longint'(y[m]) + ((acc <<< 1) >>> FRAC));
        acc = 0; for (int q = 0; q < NR; q++) acc += longint'(B[m+1][q]) * longint'(v[q]);
        r1 = sat(longint'(y[m+1]) + ((acc <<< 1) >>> FRAC));
        axi_read(PUBW | 32'((D + m) * 2), d);
        checks++;
        if (d != {r1, r0}) begin failures++; $display("y'[%0d..] = %h want %h", m, d, {r1, r0}); end
      end
    end
    // the refused write did not land
    axi_read(PUBW | 32'(2*D*2), d);
    checks++;
    if (d != {gx[1], gx[0]}) begin failures++; $display("refused write landed"); end
    repeat (20) @(posedge clk);
    checks++;
    if (n_layer_msg != 1 || last_payload != 7) begin failures++; $display("LAYER_DONE message missing or wrong: %0d msgs, payload %0d", n_layer_msg, last_payload); end
    axi_read(32'h08, d);
    checks++;
    if (d != 32'd8) begin failures++; $display("layer did not advance"); end
    // ---- VF_ACK from the SFU ----
    rx_valid <= 1; rx_msg <= '{mtype: MSG_VF_ACK, payload: 20'd11};
    @(posedge clk);
    rx_valid <= 0;
    axi_read(32'h04, d);
    checks++;
    if (d[7:4] != 4'd11 || d[15:8] != 8'd1) begin failures++; $display("VF_ACK not reflected (status %h)", d); end
    checks++;
    if (n_stall == 0) begin failures++; $display("message stall never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
