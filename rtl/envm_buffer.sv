// envm_buffer: behavioural model of the embedded non-volatile memory (eNVM) macro
// that holds the LoRA experts' weights and their routing embeddings.
//
// This is a model of a process-specific macro, not logic to be synthesised as is: a
// word array with LANES 16-bit elements per word, a lane-masked write port and a
// synchronous read port (data one cycle after re_en). What makes it different from
// the SRAM buffer is retention: lowering pwr_on does not disturb the contents, so
// after a power cycle the adapters are available again with no reload from DRAM,
// which is the reason the paper gives for using eNVM. After pwr_on rises the macro
// needs WAKE_CYCLES cycles before `ready`; reads and writes before that are ignored
// and flagged on `err`. Word width, latencies and the wake-up time are this
// design's assumptions; the paper gives none.
module envm_buffer #(
  parameter int unsigned LANES       = 8,
  parameter int unsigned ELEM_W      = 16,
  parameter int unsigned DEPTH       = 83200,
  parameter int unsigned WAKE_CYCLES = 16,
  localparam int unsigned AW         = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    pwr_on,
  output logic                    ready,
  input  logic                    we,
  input  logic [LANES-1:0]        wmask,
  input  logic [AW-1:0]           waddr,
  input  logic [LANES*ELEM_W-1:0] wdata,
  input  logic                    re,
  input  logic [AW-1:0]           raddr,
  output logic [LANES*ELEM_W-1:0] rdata,
  output logic                    err
);
  logic [LANES*ELEM_W-1:0] mem [DEPTH];
  logic [$clog2(WAKE_CYCLES+1)-1:0] wake_cnt;

  // power sequencing: ready only after the wake-up delay
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wake_cnt <= '0;
      ready    <= 1'b0;
    end else if (!pwr_on) begin
      wake_cnt <= '0;
      ready    <= 1'b0;
    end else if (!ready) begin
      if (wake_cnt == ($clog2(WAKE_CYCLES+1))'(WAKE_CYCLES)) ready <= 1'b1;
      else wake_cnt <= wake_cnt + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) err <= 1'b0;
    else        err <= (we || re) && !ready;
  end

  // array: contents are not touched by reset or by power-down
  always_ff @(posedge clk) begin
    if (we && ready) begin
      for (int l = 0; l < LANES; l++)
        if (wmask[l]) mem[waddr][l*ELEM_W +: ELEM_W] <= wdata[l*ELEM_W +: ELEM_W];
    end
    if (re && ready) rdata <= mem[raddr];
  end
endmodule
