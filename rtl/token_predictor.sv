// token_predictor: the SFU's output-length predictor and per-token latency budget.
//
// The paper's SFU predicts how many tokens a request will generate and uses that to
// turn the request's latency target into a per-token decode target T_DEC. Here the
// predictor is a lookup table written by the host, indexed by the dominant LoRA
// expert (task) chosen by the router and by the prompt-length bucket
// floor(log2(prompt_len)), capped at N_BUCKETS-1 (prompt_len 0 and 1 use bucket 0).
//   lookup: one cycle after `lookup` the prediction n_pred is valid (0 reads as 1).
//   budget: `budget` starts T_DEC = (t_target - t_pre) / n_pred, all times in
//           microseconds, 0 when the prefill already used the whole target; the
//           result is valid when `budget_done` pulses, 33 cycles later.
// Indexing, units and table layout are this design's choices.
module token_predictor #(
  parameter int unsigned N_TASKS   = 10,
  parameter int unsigned N_BUCKETS = 16,
  localparam int unsigned AW       = $clog2(N_TASKS * N_BUCKETS)
) (
  input  logic          clk,
  input  logic          rst_n,
  // table write
  input  logic          lut_we,
  input  logic [AW-1:0] lut_addr,
  input  logic [15:0]   lut_data,
  // lookup
  input  logic          lookup,
  input  logic [7:0]    task_id,
  input  logic [15:0]   prompt_len,
  output logic [15:0]   n_pred,
  // budget
  input  logic          budget,
  input  logic [31:0]   t_target_us,
  input  logic [31:0]   t_pre_us,
  output logic          budget_done,
  output logic [31:0]   t_dec_us
);
  logic [15:0] lut [N_TASKS * N_BUCKETS];

  // prompt-length bucket = index of the highest set bit
  logic [4:0] msb;
  always_comb begin
    msb = '0;
    for (int b = 0; b < 16; b++) if (prompt_len[b]) msb = 5'(b);
  end

  logic [AW-1:0] idx;
  always_comb begin
    logic [7:0] t;
    logic [4:0] bk;
    t   = (task_id < 8'(N_TASKS)) ? task_id : 8'd0;
    bk  = (msb < 5'(N_BUCKETS)) ? msb : 5'(N_BUCKETS - 1);
    idx = AW'(int'(t) * N_BUCKETS + int'(bk));
  end

  always_ff @(posedge clk) begin
    if (lut_we) lut[lut_addr] <= lut_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_pred <= 16'd1;
    else if (lookup) n_pred <= (lut[idx] == '0) ? 16'd1 : lut[idx];
  end

  logic        dv_done;
  logic [31:0] dv_q, slack;
  assign slack = (t_target_us > t_pre_us) ? t_target_us - t_pre_us : 32'd0;
  seq_divider #(.NW(32), .DW(16)) u_div (
    .clk, .rst_n, .start(budget), .dividend(slack), .divisor(n_pred),
    .busy(), .done(dv_done), .quotient(dv_q), .remainder());

  assign budget_done = dv_done;
  assign t_dec_us    = dv_q;
endmodule
