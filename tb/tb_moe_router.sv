// tb_moe_router: feeds the router a random prompt embedding and random expert
// embeddings through synchronous memory models (data one cycle after rd_en) and
// compares its outputs with a floating-point reference of the gate:
// cosine similarity per expert, then softmax. Scores must agree within 2e-3,
// weights within 1e-2, the weights must sum to ~1, the top index must be the best
// cosine, and the latency must not exceed N*(EMB/LANES + 170) + 20 cycles. One
// expert is made a scaled copy of the prompt so its score is exactly ~1.
module tb_moe_router;
  localparam int N = 4, E = 64, L = 8;
  localparam int RA = 11, AW = 17;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, rd_en;
  logic [RA-1:0] pub_row;
  logic [AW-1:0] envm_addr;
  logic [L*16-1:0] pub_rdata, envm_rdata;
  logic [15:0] omega [N];
  logic signed [15:0] score [N];
  logic [1:0] top_idx;
  logic [31:0] cycles;
  moe_router #(.N_EXPERTS(N), .EMB_DIM(E), .LANES(L), .PUB_RA(RA), .ENVM_AW(AW),
               .EMB_ROW0(11'd5), .EMB_WORD0(17'd100)) dut (.*);

  logic signed [15:0] gx [E];
  logic signed [15:0] gj [N][E];
  always @(posedge clk) if (rd_en) begin
    for (int l = 0; l < L; l++) begin
      int r, w;
      r = int'(pub_row) - 5; w = int'(envm_addr) - 100;
      pub_rdata[l*16 +: 16]  <= (r >= 0 && r < E/L) ? gx[r*L + l] : 16'hdead;
      envm_rdata[l*16 +: 16] <= (w >= 0 && w < N*E/L) ? gj[w / (E/L)][(w % (E/L))*L + l] : 16'hbeef;
    end
  end

  task automatic run_case(int trial);
    real cs [N], ex [N], sum, nx, nj, dot, best;
    int bi, t0, amp;
    amp = (trial % 2 == 0) ? 3000 : 200;
    for (int i = 0; i < E; i++) gx[i] = 16'(int'($urandom % (2*amp)) - amp);
    for (int j = 0; j < N; j++)
      for (int i = 0; i < E; i++) gj[j][i] = 16'(int'($urandom % (2*amp)) - amp);
    // expert (trial mod N) is aligned with the prompt, another is anti-aligned
    for (int i = 0; i < E; i++) gj[trial % N][i] = 16'(int'(gx[i]) / 2 + int'($urandom % 5) - 2);
    for (int i = 0; i < E; i++) gj[(trial + 1) % N][i] = 16'(-int'(gx[i]));
    sum = 0; best = -2; bi = 0;
    for (int j = 0; j < N; j++) begin
      dot = 0; nx = 0; nj = 0;
      for (int i = 0; i < E; i++) begin
        dot += real'(gx[i]) * real'(gj[j][i]); nx += real'(gx[i]) ** 2; nj += real'(gj[j][i]) ** 2;
      end
      cs[j] = dot / ($sqrt(nx) * $sqrt(nj));
      if (cs[j] > best) begin best = cs[j]; bi = j; end
      ex[j] = $exp(cs[j]); sum += ex[j];
    end
    @(posedge clk);
    start <= 1; t0 = 0;
    @(posedge clk);
    start <= 0;
    while (!done) begin @(posedge clk); t0++; end
    #1;
    checks++;
    if (t0 > N*(E/L + 170) + 20) begin failures++; $display("latency %0d cycles", t0); end
    checks++;
    if (cycles < 32'(t0 - 2) || cycles > 32'(t0 + 2)) begin failures++; $display("cycles %0d, measured %0d", cycles, t0); end
    begin
      real osum;
      osum = 0;
      for (int j = 0; j < N; j++) begin
        real s_hw, o_hw;
        s_hw = real'(score[j]) / 32768.0;
        o_hw = real'(omega[j]) / 65536.0;
        osum += o_hw;
        checks++;
        if (s_hw - cs[j] > 2e-3 || cs[j] - s_hw > 2e-3) begin failures++; $display("score[%0d] %f want %f", j, s_hw, cs[j]); end
        checks++;
        if (o_hw - ex[j]/sum > 1e-2 || ex[j]/sum - o_hw > 1e-2) begin failures++; $display("omega[%0d] %f want %f", j, o_hw, ex[j]/sum); end
      end
      checks++;
      if (osum > 1.01 || osum < 0.98) begin failures++; $display("weights sum to %f", osum); end
    end
    checks++;
    if (int'(top_idx) != bi) begin failures++; $display("top %0d want %0d", top_idx, bi); end
  endtask

  initial begin
    start = 0; pub_rdata = '0; envm_rdata = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 8; t++) run_case(t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
