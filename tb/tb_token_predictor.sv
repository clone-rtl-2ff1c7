// tb_token_predictor: loads the output-length table with random entries, looks up
// random (task, prompt length) pairs and checks the prediction against a model of
// the indexing (task, floor(log2(prompt_len)) capped); then checks the per-token
// budget T_DEC = (T_target - T_pre) / n_pred, including the case where the prefill
// already used the whole target, and its 33-cycle latency.
module tb_token_predictor;
  localparam int NT = 10, NB = 16;
  localparam int AW = $clog2(NT * NB);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic lut_we, lookup, budget, budget_done;
  logic [AW-1:0] lut_addr;
  logic [15:0] lut_data, prompt_len, n_pred;
  logic [7:0] task_id;
  logic [31:0] t_target_us, t_pre_us, t_dec_us;
  token_predictor #(.N_TASKS(NT), .N_BUCKETS(NB)) dut (.*);

  logic [15:0] model [NT * NB];

  function automatic int bucket(int len);
    int b;
    b = 0;
    for (int i = 0; i < 16; i++) if (len >= (1 << i)) b = i;
    return (b > NB - 1) ? NB - 1 : b;
  endfunction

  initial begin
    lut_we = 0; lookup = 0; budget = 0; lut_addr = 0; lut_data = 0; prompt_len = 0;
    task_id = 0; t_target_us = 0; t_pre_us = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int a = 0; a < NT * NB; a++) begin
      model[a] = (a % 17 == 0) ? 16'd0 : 16'(1 + $urandom % 2000);
      lut_we <= 1; lut_addr <= AW'(a); lut_data <= model[a];
      @(posedge clk);
    end
    lut_we <= 0;
    for (int n = 0; n < 200; n++) begin
      int tk, len, want, t;
      logic [31:0] tgt, pre;
      tk = $urandom % NT; len = (n < 5) ? n : int'($urandom % 65536);
      task_id <= 8'(tk); prompt_len <= 16'(len); lookup <= 1;
      @(posedge clk);
      lookup <= 0;
      @(posedge clk); #1;
      want = int'(model[tk * NB + bucket(len)]);
      if (want == 0) want = 1;
      checks++;
      if (int'(n_pred) != want) begin failures++; $display("task %0d len %0d: n_pred %0d want %0d", tk, len, n_pred, want); end
      tgt = 32'($urandom % 2000000); pre = (n % 7 == 0) ? tgt + 5 : 32'($urandom % 200000);
      t_target_us <= tgt; t_pre_us <= pre; budget <= 1;
      @(posedge clk);
      budget <= 0;
      t = 0;
      while (!budget_done) begin @(posedge clk); t++; end
      checks++;
      if (t != 33) begin failures++; $display("budget took %0d cycles", t); end
      checks++;
      if (t_dec_us != ((tgt > pre) ? (tgt - pre) / 32'(want) : 32'd0)) begin
        failures++; $display("t_dec %0d want %0d", t_dec_us, (tgt > pre) ? (tgt - pre) / 32'(want) : 32'd0);
      end
    end
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
