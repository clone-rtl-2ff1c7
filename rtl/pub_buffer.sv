// pub_buffer: the Processing Unit Buffer, eight SRAM banks side by side.
//
// Elements are 16-bit words. Element e is stored in bank (e mod LANES) at row
// (e div LANES), so a single row read returns LANES consecutive elements in one
// cycle, which is what the router and the LoRA datapath consume. There are two
// write ports, both taking element addresses: a single-element port used by the
// datapath to write back y', and a two-element port (an aligned pair, one 32-bit
// host word) used by the host. When both hit the same bank in the same cycle the
// host port wins (the datapath never writes while the host is loading).
// The region map used by the LPU (x, y, prompt embedding) is set in lpu.sv.
// The bank count comes from the eight SRAM instances in the accelerator's layout;
// bank size, element width and the port arrangement are this design's choices.
module pub_buffer #(
  parameter int unsigned LANES      = 8,
  parameter int unsigned ELEM_W     = 16,
  parameter int unsigned BANK_DEPTH = 1152,
  localparam int unsigned RA        = $clog2(BANK_DEPTH),
  localparam int unsigned EA        = RA + $clog2(LANES)
) (
  input  logic                    clk,
  // row read (all lanes)
  input  logic                    rd_en,
  input  logic [RA-1:0]           rd_row,
  output logic [LANES*ELEM_W-1:0] rd_data,
  // single-element write
  input  logic                    wr_en,
  input  logic [EA-1:0]           wr_addr,
  input  logic [ELEM_W-1:0]       wr_data,
  // two-element (aligned pair) write
  input  logic                    wr2_en,
  input  logic [EA-1:0]           wr2_addr,
  input  logic [2*ELEM_W-1:0]     wr2_data
);
  localparam int unsigned LB = $clog2(LANES);

  for (genvar b = 0; b < LANES; b++) begin : g_bank
    logic [ELEM_W-1:0] bank [BANK_DEPTH];
    logic              we;
    logic [RA-1:0]     wrow;
    logic [ELEM_W-1:0] wval;

    always_comb begin
      we   = 1'b0;
      wrow = wr_addr[EA-1:LB];
      wval = wr_data;
      if (wr2_en && (wr2_addr[LB-1:1] == (LB-1)'(b >> 1))) begin
        we   = 1'b1;
        wrow = wr2_addr[EA-1:LB];
        wval = (b % 2 == 0) ? wr2_data[ELEM_W-1:0] : wr2_data[2*ELEM_W-1:ELEM_W];
      end else if (wr_en && (wr_addr[LB-1:0] == LB'(b))) begin
        we = 1'b1;
      end
    end

    always_ff @(posedge clk) begin
      if (we) bank[wrow] <= wval;
      if (rd_en) rd_data[b*ELEM_W +: ELEM_W] <= bank[rd_row];
    end
  end
endmodule
