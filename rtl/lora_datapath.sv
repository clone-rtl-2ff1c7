// lora_datapath: the processing-unit datapath that applies the routed mixture of
// LoRA experts to one layer's output vector.
//
// The host GPU computes the frozen projection y = W0 x. This block adds the
// adapters, following the paper's y' = W0 x + sum_j omega_j * E_j(x) with
// E_j(x) = (alpha/r) * B_j A_j x:
//     phase A: u_j = A_j x            (RANK values per expert, all experts)
//              v_j = omega_j * u_j    (gate weight applied in rank space)
//     phase B: y'[m] = y[m] + (alpha/r) * sum_j B_j[m,:] v_j
// Merging the experts in rank space means the D_MODEL x D_MODEL weight matrix of
// each expert is never formed. alpha/r = 16/8 = 2 is a left shift (LORA_SHIFT).
//
// Numbers are 16-bit two's complement with FRAC fraction bits; products are summed
// exactly in 48-bit accumulators and shifted right (floor) and saturated when
// stored. omega is unsigned Q0.16. LANES multipliers work in parallel: each cycle
// reads one LANES-wide eNVM word and one PUB row.
//
// Memory layout (eNVM words of LANES elements):
//   A: word A_WORD0 + q*(D_MODEL/LANES) + k/LANES holds A_j[i][k..], q = j*RANK+i
//   B: word B_WORD0 + m*(NR/LANES) + w holds B_j[m][i] for q = w*LANES .. +LANES-1,
//      where NR = N_EXPERTS*RANK (B is stored row by row of the output)
// PUB: x at rows X_ROW0.., y (overwritten by y') at elements Y_ELEM0.. (a
// multiple of LANES).
// Timing: NR*D_MODEL/LANES + D_MODEL*NR/LANES + 3 cycles from start to done, as
// every cycle issues one read; `cycles` reports the count.
// The computation is the paper's; its order, formats and layout are this design's.
module lora_datapath #(
  parameter int unsigned D_MODEL    = 4096,
  parameter int unsigned RANK       = 8,
  parameter int unsigned N_EXPERTS  = 10,
  parameter int unsigned LANES      = 8,
  parameter int unsigned FRAC       = 8,
  parameter int unsigned LORA_SHIFT = 1,
  parameter int unsigned PUB_RA     = 11,
  parameter int unsigned ENVM_AW    = 17,
  parameter logic [PUB_RA-1:0]           X_ROW0  = '0,
  parameter logic [PUB_RA+$clog2(LANES)-1:0] Y_ELEM0 = '0,
  parameter logic [ENVM_AW-1:0]          A_WORD0 = '0,
  parameter logic [ENVM_AW-1:0]          B_WORD0 = '0,
  localparam int unsigned EA = PUB_RA + $clog2(LANES)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  input  logic [15:0]           omega [N_EXPERTS],
  // memory reads
  output logic                  rd_en,
  output logic [PUB_RA-1:0]     pub_row,
  output logic [ENVM_AW-1:0]    envm_addr,
  input  logic [LANES*16-1:0]   pub_rdata,
  input  logic [LANES*16-1:0]   envm_rdata,
  // y' write-back
  output logic                  y_we,
  output logic [EA-1:0]         y_addr,
  output logic [15:0]           y_data,
  output logic [31:0]           cycles
);
  localparam int unsigned NR  = N_EXPERTS * RANK;
  localparam int unsigned KW  = D_MODEL / LANES;   // words per A row
  localparam int unsigned BW  = NR / LANES;        // words per B row
  localparam int unsigned QW  = $clog2(NR);
  localparam int unsigned KWW = (KW > 1) ? $clog2(KW) : 1;
  localparam int unsigned BWW = (BW > 1) ? $clog2(BW) : 1;
  localparam int unsigned MW  = $clog2(D_MODEL);
  localparam int unsigned LB  = $clog2(LANES);

  typedef enum logic [1:0] {S_IDLE, S_A, S_B, S_TAIL} state_e;
  state_e state;

  // issue counters
  logic [QW-1:0]  q;     // phase A: rank row of the concatenated experts
  logic [KWW-1:0] kw;
  logic [MW-1:0]  m;     // phase B: output element
  logic [BWW-1:0] w;

  // tags of the read issued last cycle (its data arrive now)
  logic           t_v, t_a, t_first, t_last;
  logic [QW-1:0]  t_q;
  logic [BWW-1:0] t_w;
  logic [MW-1:0]  t_m;

  logic signed [15:0] v [NR];
  logic signed [47:0] acc;
  logic signed [15:0] y_old;

  // LANES-wide multiply: A x  (phase A) or B v (phase B)
  logic signed [47:0] lane_sum;
  always_comb begin
    lane_sum = '0;
    for (int l = 0; l < LANES; l++) begin
      logic signed [15:0] wgt, opd;
      wgt = envm_rdata[l*16 +: 16];
      if (t_a) opd = pub_rdata[l*16 +: 16];
      else     opd = v[int'(t_w) * LANES + l];
      lane_sum = lane_sum + 48'(wgt * opd);
    end
  end

  logic [EA-1:0] y_elem_issue;
  logic [LB-1:0] y_lane_unused;
  assign y_elem_issue = Y_ELEM0 + EA'(m);
  assign y_lane_unused = y_elem_issue[LB-1:0];  // row address only; lane chosen on return

  assign rd_en     = (state == S_A) || (state == S_B);
  assign pub_row   = (state == S_A) ? X_ROW0 + PUB_RA'(kw) : y_elem_issue[EA-1:LB];
  assign envm_addr = (state == S_A) ? A_WORD0 + ENVM_AW'(q) * ENVM_AW'(KW) + ENVM_AW'(kw)
                                    : B_WORD0 + ENVM_AW'(m) * ENVM_AW'(BW) + ENVM_AW'(w);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; busy <= 1'b0; done <= 1'b0;
      q <= '0; kw <= '0; m <= '0; w <= '0;
      t_v <= 1'b0; t_a <= 1'b0; t_first <= 1'b0; t_last <= 1'b0;
      t_q <= '0; t_w <= '0; t_m <= '0;
      acc <= '0; y_old <= '0; y_we <= 1'b0; y_addr <= '0; y_data <= '0; cycles <= '0;
      for (int i = 0; i < NR; i++) v[i] <= '0;
    end else begin
      done <= 1'b0;
      y_we <= 1'b0;
      if (busy) cycles <= cycles + 1;

      // ---- tag the read issued this cycle ----
      t_v     <= rd_en;
      t_a     <= (state == S_A);
      t_first <= (state == S_A) ? (kw == '0) : (w == '0);
      t_last  <= (state == S_A) ? (kw == KWW'(KW-1)) : (w == BWW'(BW-1));
      t_q     <= q;
      t_w     <= w;
      t_m     <= m;

      // ---- accumulate the data of last cycle's read ----
      if (t_v) begin
        logic signed [47:0] s;
        s = (t_first ? 48'sd0 : acc) + lane_sum;
        acc <= s;
        if (!t_a && t_first) y_old <= pub_rdata[int'(t_m[LB-1:0]) * 16 +: 16];
        if (t_last) begin
          if (t_a) begin
            // u = A x (rescaled), v = omega * u
            logic signed [15:0] u;
            logic signed [33:0] uw;
            u  = clone_pkg::sat16(s >>> FRAC);
            uw = u * $signed({1'b0, omega[int'(t_q) / RANK]});
            v[t_q] <= 16'(uw >>> 16);
          end else begin
            logic signed [15:0] yb;
            yb = (t_first) ? $signed(pub_rdata[int'(t_m[LB-1:0]) * 16 +: 16])
                           : y_old;
            y_we   <= 1'b1;
            y_addr <= Y_ELEM0 + EA'(t_m);
            y_data <= clone_pkg::sat16(48'(yb) + ((s <<< LORA_SHIFT) >>> FRAC));
          end
        end
      end

      // ---- issue ----
      case (state)
        S_IDLE: if (start) begin
          state <= S_A; busy <= 1'b1; cycles <= '0;
          q <= '0; kw <= '0; m <= '0; w <= '0;
        end
        S_A: begin
          if (kw == KWW'(KW-1)) begin
            kw <= '0;
            if (q == QW'(NR-1)) state <= S_B;
            else q <= q + 1'b1;
          end else kw <= kw + 1'b1;
        end
        S_B: begin
          if (w == BWW'(BW-1)) begin
            w <= '0;
            if (m == MW'(D_MODEL-1)) state <= S_TAIL;
            else m <= m + 1'b1;
          end else w <= w + 1'b1;
        end
        S_TAIL: if (!t_v) begin
          busy  <= 1'b0;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
