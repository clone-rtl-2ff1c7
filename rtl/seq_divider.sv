// seq_divider: unsigned restoring divider, one quotient bit per clock.
//
// A start pulse loads dividend and divisor; NW cycles later `done` pulses with
// quotient and remainder valid (they stay until the next start). Division by zero
// returns an all-ones quotient and the dividend as remainder.
module seq_divider #(
  parameter int unsigned NW = 32,  // dividend / quotient width
  parameter int unsigned DW = 16   // divisor width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] dividend,
  input  logic [DW-1:0] divisor,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quotient,
  output logic [DW-1:0] remainder
);
  logic [DW:0]             rem;     // partial remainder, always < divisor
  logic [NW-1:0]           q;       // dividend bits shifted out, quotient bits in
  logic [DW-1:0]           dvs;
  logic [$clog2(NW+1)-1:0] cnt;
  logic [DW+1:0]           shifted, trial;
  logic [DW:0]             rem_nx;
  logic [NW-1:0]           q_nx;

  always_comb begin
    shifted = {rem, q[NW-1]};
    trial   = shifted - {2'b00, dvs};
    if (!trial[DW+1]) begin
      rem_nx = trial[DW:0];
      q_nx   = {q[NW-2:0], 1'b1};
    end else begin
      rem_nx = shifted[DW:0];
      q_nx   = {q[NW-2:0], 1'b0};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; rem <= '0; q <= '0; dvs <= '0; cnt <= '0;
      quotient <= '0; remainder <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        rem  <= '0;
        q    <= dividend;
        dvs  <= divisor;
        cnt  <= ($clog2(NW+1))'(NW);
      end else if (busy) begin
        rem <= rem_nx;
        q   <= q_nx;
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy      <= 1'b0;
          done      <= 1'b1;
          quotient  <= q_nx;
          remainder <= rem_nx[DW-1:0];
        end
      end
    end
  end
endmodule
