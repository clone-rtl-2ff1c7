// tb_lpu_sfu_channel: pushes random typed messages through both directions of the
// LPU<->SFU stream channel with random stalls on both ends, and checks that every
// message arrives once, in order and unchanged, that a full FIFO holds off the
// sender (backpressure), and that a message written into an empty FIFO is visible
// at the output one cycle later.
module tb_lpu_sfu_channel;
  import clone_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic      a_iv, a_ir, a_ov, a_or, b_iv, b_ir, b_ov, b_or;
  chan_msg_t a_im, a_om, b_im, b_om;
  lpu_sfu_channel #(.DEPTH(4)) dut (
    .clk, .rst_n,
    .l2s_in_valid(a_iv), .l2s_in_ready(a_ir), .l2s_in_msg(a_im),
    .l2s_out_valid(a_ov), .l2s_out_ready(a_or), .l2s_out_msg(a_om),
    .s2l_in_valid(b_iv), .s2l_in_ready(b_ir), .s2l_in_msg(b_im),
    .s2l_out_valid(b_ov), .s2l_out_ready(b_or), .s2l_out_msg(b_om));

  localparam int N = 300;
  chan_msg_t sent_a [N], sent_b [N];
  int na_tx = 0, na_rx = 0, nb_tx = 0, nb_rx = 0, n_full = 0;

  function automatic chan_msg_t rnd_msg();
    chan_msg_t m;
    m.mtype   = msg_type_e'(4'($urandom % 3 + 1));
    m.payload = 20'($urandom);
    return m;
  endfunction

  initial begin
    a_iv = 0; b_iv = 0; a_or = 0; b_or = 0; a_im = '0; b_im = '0;
    for (int i = 0; i < N; i++) begin sent_a[i] = rnd_msg(); sent_b[i] = rnd_msg(); end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // latency: one message into an empty FIFO, visible next cycle
    a_iv <= 1; a_im <= sent_a[0];
    @(posedge clk);
    a_iv <= 0;
    #1;
    checks++;
    if (!(a_ov && a_om == sent_a[0])) begin failures++; $display("latency check failed"); end
    a_or <= 1;
    @(posedge clk);
    a_or <= 0;
    na_tx = 1; na_rx = 1;
    // fill without draining: the fifo must refuse the fifth message
    for (int k = 0; k < 6; k++) begin
      b_iv <= 1; b_im <= sent_b[nb_tx];
      @(posedge clk);
      if (b_ir) nb_tx++; else n_full++;
    end
    b_iv <= 0;
    checks++;
    if (nb_tx != 4 || n_full != 2) begin failures++; $display("backpressure: accepted %0d refused %0d", nb_tx, n_full); end
    // random traffic both ways
    while (na_rx < N || nb_rx < N) begin
      a_iv <= (na_tx < N) && (($urandom % 3) != 0);
      b_iv <= (nb_tx < N) && (($urandom % 3) != 0);
      a_im <= sent_a[na_tx < N ? na_tx : 0];
      b_im <= sent_b[nb_tx < N ? nb_tx : 0];
      a_or <= ($urandom % 4) != 0;
      b_or <= ($urandom % 2) == 0;
      @(posedge clk);
      if (a_iv && a_ir) na_tx++;
      if (b_iv && b_ir) nb_tx++;
      if (a_ov && a_or) begin
        checks++;
        if (a_om != sent_a[na_rx]) begin failures++; $display("l2s msg %0d wrong", na_rx); end
        na_rx++;
      end
      if (b_ov && b_or) begin
        checks++;
        if (b_om != sent_b[nb_rx]) begin failures++; $display("s2l msg %0d wrong", nb_rx); end
        nb_rx++;
      end
    end
    a_iv <= 0; b_iv <= 0;
    repeat (3) @(posedge clk);
    checks++;
    if (a_ov || b_ov) begin failures++; $display("extra message"); end
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
