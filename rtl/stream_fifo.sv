// stream_fifo: synchronous valid/ready FIFO, DEPTH entries of type T.
//
// in_ready is high while the FIFO has room; out_valid while it holds data. A push
// and a pop may happen in the same cycle. Data leaves in arrival order, the oldest
// entry is shown on out_data without a read cycle (first-word fall-through).
// A pushed word is visible at the output one cycle after the push. The registers
// reset asynchronously (rst_n low); the occupancy assertion is disabled by the
// same rst_n, which is why lint reports rst_n as used both synchronously and
// asynchronously. Each direction of the LPU-SFU channel is one of these FIFOs; the
// paper names the channel only, so its FIFO form and depth are this design's.
module stream_fifo #(
  parameter int unsigned WIDTH = 24,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rd_ptr, wr_ptr;
  logic [PW:0]      count;
  logic             push, pop;

  assign in_ready  = (count != (PW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == PW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == PW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // the occupancy can never pass DEPTH
  property p_no_overflow;
    @(posedge clk) disable iff (!rst_n) count <= (PW+1)'(DEPTH);
  endproperty
  assert property (p_no_overflow);
endmodule
