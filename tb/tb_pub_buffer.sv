// tb_pub_buffer: writes the banked processing-unit buffer with random single-element
// and pair writes (including cycles with both at once, where the pair write must win
// on the two banks it covers, whatever the rows) and reads whole rows back, comparing with a flat model.
// Row reads are checked to return data exactly one cycle after rd_en.
module tb_pub_buffer;
  localparam int L = 8, W = 16, D = 64;
  localparam int RA = $clog2(D), EA = RA + $clog2(L);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rd_en, wr_en, wr2_en;
  logic [RA-1:0] rd_row;
  logic [L*W-1:0] rd_data;
  logic [EA-1:0] wr_addr, wr2_addr;
  logic [W-1:0] wr_data;
  logic [2*W-1:0] wr2_data;
  pub_buffer #(.LANES(L), .ELEM_W(W), .BANK_DEPTH(D)) dut (.*);

  logic [W-1:0] model [D*L];

  initial begin
    rd_en = 0; wr_en = 0; wr2_en = 0; rd_row = 0; wr_addr = 0; wr2_addr = 0; wr_data = 0; wr2_data = 0;
    // initialise every element through pair writes
    for (int e = 0; e < D*L; e += 2) begin
      @(negedge clk);
      wr2_en = 1; wr2_addr = EA'(e); wr2_data = {16'(e + 1), 16'(e)};
      model[e] = 16'(e); model[e+1] = 16'(e + 1);
    end
    @(negedge clk); wr2_en = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      wr_en = ($urandom % 2) == 1; wr2_en = ($urandom % 2) == 1; rd_en = 1'b1;
      wr_addr = EA'($urandom); wr2_addr = EA'($urandom) & ~EA'(1);
      wr_data = W'($urandom); wr2_data = 32'($urandom); rd_row = RA'($urandom);
      @(posedge clk);
      // read launched now returns the row before this edge's writes
      #1;
      checks++;
      for (int l = 0; l < L; l++)
        if (rd_data[l*W +: W] != model[int'(rd_row)*L + l]) begin
          failures++; $display("row %0d lane %0d: got %h want %h", rd_row, l, rd_data[l*W +: W], model[int'(rd_row)*L + l]);
          break;
        end
      if (wr_en && !(wr2_en && wr_addr[2:1] == wr2_addr[2:1])) model[wr_addr] = wr_data;
      if (wr2_en) begin model[wr2_addr] = wr2_data[15:0]; model[wr2_addr + 1] = wr2_data[31:16]; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
