// clone_flow.svh: host-side request flow for the accelerator testbenches.
// Include inside a testbench module that declares
//   localparams D, R, N, E, L, NL, NA, H (model width, rank, experts, embedding
//   length, lanes, layers, V/F levels, policy hidden units),
//   clk, an axi_lite_if `hs` wired to the top's AXI port, `checks`, `failures`,
// after including axil_host_tasks.svh.
// The flow is the one the accelerator is built for: per request the host starts
// the SFU (the chip controller then wakes the LPU), loads x, y and the prompt
// embedding into the PUB, asks the LPU to route, then for every layer of the
// prefill and of each generated token hands the layer to the LPU (LORA command).
// Within a token layers are issued back to back; at the end of the token the host
// waits until the SFU has acknowledged every layer boundary (the V/F level for the
// next token is in force). Results are compared with reference models:
// gate weights in floating point, y' exactly.

localparam int NR = N * R;
localparam logic [31:0] PUBW = 32'h2000_0000, ENVW = 32'h4000_0000, SFUB = 32'h8000_0000;

shortint fA [NR*D];        // A_q[k] at q*D + k
shortint fB [D*NR];        // B[m][q] at m*NR + q
shortint fG [N*E];         // expert embeddings
shortint fx [D], fy [D], fgx [E];
logic [15:0] f_omega [N];
int f_top;
int n_lora_checked = 0;

function automatic shortint hval(int a, int b, int c, int amp);
  int unsigned h;
  h = (32'(a) * 32'd2654435761) ^ (32'(b) * 32'd40503) ^ (32'(c) * 32'd2246822519);
  h = h ^ (h >> 15);
  h = h * 32'd2654435761;
  h = h ^ (h >> 13);
  return shortint'(int'(h % (2 * amp)) - amp);
endfunction

function automatic shortint fsat(longint v);
  if (v > 32767) return 16'sd32767;
  if (v < -32768) return -16'sd32768;
  return shortint'(v);
endfunction

task automatic flow_make_adapters(int seed);
  for (int q = 0; q < NR; q++) for (int k = 0; k < D; k++) fA[q*D + k] = hval(seed, q, k, 128);
  for (int m = 0; m < D; m++) for (int q = 0; q < NR; q++) fB[m*NR + q] = hval(seed + 1, m, q, 128);
  for (int j = 0; j < N; j++) for (int i = 0; i < E; i++) fG[j*E + i] = hval(seed + 2, j, i, 2000);
endtask

task automatic flow_load_envm();
  for (int e = 0; e < NR*D; e += 2) axi_write(ENVW | 32'(e * 2), {fA[e+1], fA[e]});
  for (int e = 0; e < D*NR; e += 2) axi_write(ENVW | 32'((NR*D + e) * 2), {fB[e+1], fB[e]});
  for (int e = 0; e < N*E; e += 2) axi_write(ENVW | 32'((2*NR*D + e) * 2), {fG[e+1], fG[e]});
endtask

// prompt embedding close to expert `near`
task automatic flow_make_request(int seed, int near);
  for (int k = 0; k < D; k++) begin fx[k] = hval(seed, 7, k, 1024); fy[k] = hval(seed, 8, k, 1024); end
  for (int i = 0; i < E; i++) fgx[i] = shortint'(int'(fG[near*E + i]) + int'(hval(seed, 9, i, 300)));
endtask

task automatic flow_load_pub();
  for (int k = 0; k < D; k += 2) axi_write(PUBW | 32'(k * 2), {fx[k+1], fx[k]});
  for (int k = 0; k < D; k += 2) axi_write(PUBW | 32'((D + k) * 2), {fy[k+1], fy[k]});
  for (int i = 0; i < E; i += 2) axi_write(PUBW | 32'((2*D + i) * 2), {fgx[i+1], fgx[i]});
endtask

task automatic flow_wait_lpu();
  logic [31:0] st;
  do axi_read(32'h04, st); while (st[0] || !st[1]);
endtask

// ROUTE and compare with a floating-point gate
task automatic flow_route();
  real cs [N], ex [N], sum, best;
  int bi;
  logic [31:0] d;
  axi_write(32'h00, 32'd1);
  flow_wait_lpu();
  sum = 0; best = -2; bi = 0;
  for (int j = 0; j < N; j++) begin
    real dt, nx, nj;
    dt = 0; nx = 0; nj = 0;
    for (int i = 0; i < E; i++) begin
      dt += real'(fgx[i]) * real'(fG[j*E + i]); nx += real'(fgx[i]) ** 2; nj += real'(fG[j*E + i]) ** 2;
    end
    cs[j] = dt / ($sqrt(nx) * $sqrt(nj));
    if (cs[j] > best) begin best = cs[j]; bi = j; end
    ex[j] = $exp(cs[j]); sum += ex[j];
  end
  for (int j = 0; j < N; j++) begin
    axi_read(32'h40 + 32'(4*j), d);
    f_omega[j] = d[15:0];
    checks++;
    if (real'(f_omega[j]) / 65536.0 - ex[j] / sum > 1e-2 || ex[j] / sum - real'(f_omega[j]) / 65536.0 > 1e-2) begin
      failures++; $display("omega[%0d] = %f, reference %f", j, real'(f_omega[j]) / 65536.0, ex[j] / sum);
    end
  end
  axi_read(32'h0C, d);
  f_top = int'(d);
  checks++;
  if (f_top != bi) begin failures++; $display("dominant expert %0d, reference %0d", f_top, bi); end
endtask

// reference y <- y + (alpha/r) * sum_j omega_j B_j A_j x, in the datapath's arithmetic
task automatic flow_ref_lora();
  shortint v [NR];
  longint acc;
  for (int q = 0; q < NR; q++) begin
    shortint u;
    acc = 0;
    for (int k = 0; k < D; k++) acc += longint'(fA[q*D + k]) * longint'(fx[k]);
    u = fsat(acc >>> 8);
    v[q] = shortint'((longint'(u) * longint'(f_omega[q / R])) >>> 16);
  end
  for (int m = 0; m < D; m++) begin
    acc = 0;
    for (int q = 0; q < NR; q++) acc += longint'(fB[m*NR + q]) * longint'(v[q]);
    fy[m] = fsat(longint'(fy[m]) + ((acc <<< 1) >>> 8));
  end
endtask

task automatic flow_check_y();
  logic [31:0] d;
  int bad;
  bad = 0;
  for (int m = 0; m < D; m += 2) begin
    axi_read(PUBW | 32'((D + m) * 2), d);
    if (d != {fy[m+1], fy[m]}) begin
      if (bad < 4) $display("y'[%0d..%0d] = %h, reference %h", m, m + 1, d, {fy[m+1], fy[m]});
      bad++;
    end
  end
  checks++;
  n_lora_checked++;
  if (bad != 0) failures++;
endtask

// one layer: LORA command, wait for the datapath, track the reference
task automatic flow_layer(bit check);
  axi_write(32'h00, 32'd2);
  flow_wait_lpu();
  flow_ref_lora();
  if (check) flow_check_y();
endtask

// wait until the SFU has acknowledged `n` layer boundaries (LPU STATUS count)
task automatic flow_wait_acks(int n, output int waited);
  logic [31:0] st;
  waited = 0;
  axi_read(32'h04, st);
  while (int'(st[15:8]) != (n % 256)) begin
    repeat (4) @(posedge clk);
    waited++;
    axi_read(32'h04, st);
  end
endtask

// write the SFU tables: a policy that picks level (next layer + 2) (see tb_sfu),
// predicted length (task + 5) tokens for every bucket, and a power table
task automatic flow_load_sfu(int pre_level, int t_target_us, int plen);
  localparam int NI = 4;
  for (int p = 0; p < NI*H + H + H*NA + NA; p++) begin
    int v;
    v = 0;
    if (p == 3) v = 256;
    if (p == NI*H) v = 2;
    if (p >= NI*H + H && p < NI*H + H + H*NA && (p - NI*H - H) % H == 0) v = 512 * ((p - NI*H - H) / H);
    if (p >= NI*H + H + H*NA) v = -((p - NI*H - H - H*NA) ** 2);
    axi_write(SFUB | 32'h1000 | 32'(4*p), 32'(v));
  end
  for (int a = 0; a < N*16; a++) axi_write(SFUB | 32'h2000 | 32'(4*a), 32'(a / 16 + 5));
  for (int a = 0; a < 2*NA; a++) axi_write(SFUB | 32'h4000 | 32'(4*a), 32'(100 + 10*a));
  axi_write(SFUB | 32'h34, 32'(pre_level));
  axi_write(SFUB | 32'h0C, 32'(t_target_us));
  axi_write(SFUB | 32'h10, 32'(plen));
  axi_write(SFUB | 32'h04, 32'd3);
endtask

task automatic flow_sfu_ctrl(logic [31:0] v);
  axi_write(SFUB, v);
endtask

task automatic flow_wait_phase(phase_e p);
  logic [31:0] st;
  do axi_read(SFUB | 32'h14, st); while (st[2:1] != 2'(p));
endtask
