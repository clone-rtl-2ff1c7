// exp_neg: combinational exp(d) for d in [-2, 0], the range of (s_j - max s) when
// the scores s are cosine similarities. Used by the router's softmax.
//
// exp(d) = 2^(d*log2 e). With t = -d*log2 e = n + f (n integer, f fraction) and
// g = 1 - f, exp(d) = 2^g / 2^(n+1). 2^g on [0,1] is a cubic,
// 1 + 0.6958 g + 0.2251 g^2 + 0.0791 g^3 (max error about 1e-4), in Horner form.
// Input: d in Q1.15 (signed 17 bits, -65536 .. 0). Output: Q0.16 unsigned
// (65536 = 1.0). The polynomial is this design's choice; the paper only says that
// a softmax turns the similarities into gate weights.
module exp_neg (
  input  logic signed [16:0] d,
  output logic        [16:0] e
);
  localparam logic [16:0] LOG2E = 17'd47274;   // log2(e) in Q1.15
  localparam logic [31:0] C0 = 32'd65536;      // Q.16 coefficients
  localparam logic [31:0] C1 = 32'd45600;
  localparam logic [31:0] C2 = 32'd14752;
  localparam logic [31:0] C3 = 32'd5184;

  logic [16:0] nd;       // -d, Q1.15
  logic [33:0] t_full;
  logic [17:0] t;        // Q.15, 0 .. ~2.9
  logic [2:0]  n;
  logic [16:0] g;        // Q.16, 0 .. 65536
  logic [39:0] p;

  always_comb begin
    nd     = (d > 0) ? 17'd0 : 17'(-d);
    t_full = 34'(nd) * 34'(LOG2E);
    t      = 18'(t_full >> 15);
    n      = 3'(t >> 15);
    g      = 17'd65536 - 17'({t[14:0], 1'b0});
    p      = ((40'(C3) * 40'(g)) >> 16) + 40'(C2);
    p      = ((p * 40'(g)) >> 16) + 40'(C1);
    p      = ((p * 40'(g)) >> 16) + 40'(C0);   // 2^g in Q.16, 65536 .. 131072
    e      = 17'(p >> (40'(n) + 1));
  end
endmodule
