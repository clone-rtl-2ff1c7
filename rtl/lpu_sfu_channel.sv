// lpu_sfu_channel: the bidirectional streaming channel between the LoRA Processing
// Unit and the Special Function Unit.
//
// Each direction is an independent valid/ready stream of clone_pkg::chan_msg_t
// messages (4-bit type, 20-bit payload) buffered by a DEPTH-entry FIFO, so either
// side may post a message without waiting for the other to be ready; a full FIFO
// back-pressures the sender through *_ready. Latency is one cycle from accepted
// input to visible output. The paper only states that such a channel exists; the
// message format, the buffering and the handshake are this design's choices.
module lpu_sfu_channel
  import clone_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  // LPU -> SFU
  input  logic      l2s_in_valid,
  output logic      l2s_in_ready,
  input  chan_msg_t l2s_in_msg,
  output logic      l2s_out_valid,
  input  logic      l2s_out_ready,
  output chan_msg_t l2s_out_msg,
  // SFU -> LPU
  input  logic      s2l_in_valid,
  output logic      s2l_in_ready,
  input  chan_msg_t s2l_in_msg,
  output logic      s2l_out_valid,
  input  logic      s2l_out_ready,
  output chan_msg_t s2l_out_msg
);
  stream_fifo #(.WIDTH(MSG_W), .DEPTH(DEPTH)) u_l2s (
    .clk, .rst_n,
    .in_valid(l2s_in_valid), .in_ready(l2s_in_ready), .in_data(l2s_in_msg),
    .out_valid(l2s_out_valid), .out_ready(l2s_out_ready), .out_data(l2s_out_msg));

  stream_fifo #(.WIDTH(MSG_W), .DEPTH(DEPTH)) u_s2l (
    .clk, .rst_n,
    .in_valid(s2l_in_valid), .in_ready(s2l_in_ready), .in_data(s2l_in_msg),
    .out_valid(s2l_out_valid), .out_ready(s2l_out_ready), .out_data(s2l_out_msg));
endmodule
