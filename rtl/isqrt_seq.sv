// isqrt_seq: unsigned integer square root, floor(sqrt(x)), by the bit-serial
// digit-by-digit method: one result bit per clock, W/2 cycles from start to done.
module isqrt_seq #(
  parameter int unsigned W = 48   // radicand width (even)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   x,
  output logic           busy,
  output logic           done,
  output logic [W/2-1:0] root
);
  logic [W-1:0]             rad;    // radicand, consumed two bits per step
  logic [W/2+1:0]           rem;
  logic [W/2-1:0]           r;
  logic [$clog2(W/2+1)-1:0] cnt;
  logic [W/2+3:0]           cur, trial;
  logic [W/2+1:0]           rem_nx;
  logic [W/2-1:0]           r_nx;

  always_comb begin
    cur   = {rem, rad[W-1:W-2]};
    trial = cur - {2'b00, r, 2'b01};
    if (!trial[W/2+3]) begin
      rem_nx = trial[W/2+1:0];
      r_nx   = {r[W/2-2:0], 1'b1};
    end else begin
      rem_nx = cur[W/2+1:0];
      r_nx   = {r[W/2-2:0], 1'b0};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; rad <= '0; rem <= '0; r <= '0; cnt <= '0; root <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        rad  <= x;
        rem  <= '0;
        r    <= '0;
        cnt  <= ($clog2(W/2+1))'(W/2);
      end else if (busy) begin
        rad <= {rad[W-3:0], 2'b00};
        rem <= rem_nx;
        r   <= r_nx;
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          root <= r_nx;
        end
      end
    end
  end
endmodule
