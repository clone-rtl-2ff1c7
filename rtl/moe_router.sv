// moe_router: the request-wise, parameter-free soft mixture-of-experts gate.
//
// For a prompt embedding g_x (held in the PUB) and one stored embedding g_j per
// LoRA expert (held in the eNVM), the router computes
//     s_j     = cos(g_x, g_j) = <g_x, g_j> / (|g_x| * |g_j|)
//     omega_j = exp(s_j) / sum_k exp(s_k)
// and reports the weights omega_j (unsigned Q0.16, 65535 ~ 1.0), the scores s_j
// (signed Q1.15) and the index of the best expert. There are no trainable gate
// parameters; this is the paper's routing rule.
//
// How it works (this design's choices): the vectors are 16-bit integers read
// LANES elements per cycle. Pass 1 streams every expert's embedding once beside the
// prompt embedding and accumulates dot products and squared norms with LANES
// multipliers (N_EXPERTS*EMB_DIM/LANES cycles). Pass 2 takes integer square roots
// of the norms and divides, one expert at a time, to get s_j. Pass 3 is the
// softmax: exp(s_j - max s) by exp_neg, a sum, and one division per expert.
// Latency is at most N_EXPERTS*(EMB_DIM/LANES + 170) + 20 cycles (each expert costs
// a 24-step square root and two 64-step divisions); `cycles` reports it.
//
// Memory interface: rd_en with pub_row / envm_addr; data arrive one cycle later on
// pub_rdata / envm_rdata (both memories are synchronous).
module moe_router #(
  parameter int unsigned N_EXPERTS = 10,
  parameter int unsigned EMB_DIM   = 1024,
  parameter int unsigned LANES     = 8,
  parameter int unsigned PUB_RA    = 11,      // PUB row address width
  parameter int unsigned ENVM_AW   = 17,      // eNVM word address width
  parameter logic [PUB_RA-1:0]  EMB_ROW0  = '0, // first PUB row of the prompt embedding
  parameter logic [ENVM_AW-1:0] EMB_WORD0 = '0, // first eNVM word of expert 0's embedding
  localparam int unsigned XW = (N_EXPERTS > 1) ? $clog2(N_EXPERTS) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  // memory reads
  output logic                       rd_en,
  output logic [PUB_RA-1:0]          pub_row,
  output logic [ENVM_AW-1:0]         envm_addr,
  input  logic [LANES*16-1:0]        pub_rdata,
  input  logic [LANES*16-1:0]        envm_rdata,
  // results
  output logic [15:0]                omega   [N_EXPERTS],
  output logic signed [15:0]         score   [N_EXPERTS],
  output logic [XW-1:0]              top_idx,
  output logic [31:0]                cycles
);
  localparam int unsigned ROWS = EMB_DIM / LANES;
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1;

  typedef enum logic [3:0] {
    S_IDLE, S_DOT, S_DRAIN, S_SQX, S_SQJ, S_DIV, S_DIVW, S_EXP, S_NORM, S_NORMW, S_DONE
  } state_e;
  state_e state;

  // ---------------- pass 1: dot products and norms ----------------
  logic [XW-1:0]        j_rd, j_acc;      // expert being read / accumulated
  logic [RW-1:0]        row_rd;
  logic                 acc_v;            // read data arrive this cycle
  logic signed [47:0]   dot   [N_EXPERTS];
  logic [47:0]          nrm   [N_EXPERTS];
  logic [47:0]          nrm_x;
  logic signed [47:0]   lane_dot;
  logic [47:0]          lane_nj, lane_nx;

  always_comb begin
    lane_dot = '0;
    lane_nj  = '0;
    lane_nx  = '0;
    for (int l = 0; l < LANES; l++) begin
      logic signed [15:0] a, b;
      a = pub_rdata[l*16 +: 16];
      b = envm_rdata[l*16 +: 16];
      lane_dot = lane_dot + 48'(a * b);
      lane_nj  = lane_nj  + 48'(b * b);
      lane_nx  = lane_nx  + 48'(a * a);
    end
  end

  assign rd_en     = (state == S_DOT);
  assign pub_row   = EMB_ROW0 + PUB_RA'(row_rd);
  assign envm_addr = EMB_WORD0 + ENVM_AW'(j_rd) * ENVM_AW'(ROWS) + ENVM_AW'(row_rd);

  // ---------------- pass 2 / 3 arithmetic units ----------------
  logic        sq_start, sq_done;
  logic [47:0] sq_x;
  logic [23:0] sq_root;
  logic [23:0] root_x;
  isqrt_seq #(.W(48)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .x(sq_x), .busy(), .done(sq_done), .root(sq_root));

  logic        dv_start, dv_done;
  logic [63:0] dv_num;
  logic [47:0] dv_den;
  logic [63:0] dv_q;
  seq_divider #(.NW(64), .DW(48)) u_div (
    .clk, .rst_n, .start(dv_start), .dividend(dv_num), .divisor(dv_den),
    .busy(), .done(dv_done), .quotient(dv_q), .remainder());

  logic [XW-1:0]       j2;
  logic                neg;
  logic signed [16:0]  smax;
  logic signed [16:0]  ediff;
  logic [16:0]         e_val;
  logic [16:0]         e_j  [N_EXPERTS];
  logic [23:0]         e_sum;

  assign ediff = 17'(score[j2]) - smax;
  exp_neg u_exp (.d(ediff), .e(e_val));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; busy <= 1'b0; done <= 1'b0;
      j_rd <= '0; j_acc <= '0; row_rd <= '0; acc_v <= 1'b0;
      nrm_x <= '0; root_x <= '0; j2 <= '0; neg <= 1'b0; smax <= '0; e_sum <= '0;
      sq_start <= 1'b0; sq_x <= '0; dv_start <= 1'b0; dv_num <= '0; dv_den <= '0;
      top_idx <= '0; cycles <= '0;
      for (int j = 0; j < N_EXPERTS; j++) begin
        dot[j] <= '0; nrm[j] <= '0; omega[j] <= '0; score[j] <= '0; e_j[j] <= '0;
      end
    end else begin
      done     <= 1'b0;
      sq_start <= 1'b0;
      dv_start <= 1'b0;
      if (busy) cycles <= cycles + 1;
      // accumulate the read issued last cycle
      acc_v    <= (state == S_DOT);
      j_acc    <= j_rd;
      if (acc_v) begin
        dot[j_acc] <= dot[j_acc] + lane_dot;
        nrm[j_acc] <= nrm[j_acc] + lane_nj;
        if (j_acc == '0) nrm_x <= nrm_x + lane_nx;
      end

      case (state)
        S_IDLE: if (start) begin
          state  <= S_DOT;
          busy   <= 1'b1;
          cycles <= '0;
          j_rd   <= '0;
          row_rd <= '0;
          nrm_x  <= '0;
          for (int j = 0; j < N_EXPERTS; j++) begin dot[j] <= '0; nrm[j] <= '0; end
        end
        S_DOT: begin
          if (row_rd == RW'(ROWS-1)) begin
            row_rd <= '0;
            if (j_rd == XW'(N_EXPERTS-1)) state <= S_DRAIN;
            else j_rd <= j_rd + 1'b1;
          end else row_rd <= row_rd + 1'b1;
        end
        S_DRAIN: if (!acc_v) begin
          // |g_x|
          sq_x     <= nrm_x;
          sq_start <= 1'b1;
          state    <= S_SQX;
          j2       <= '0;
        end
        S_SQX: if (sq_done) begin
          root_x   <= sq_root;
          sq_x     <= nrm[0];
          sq_start <= 1'b1;
          state    <= S_SQJ;
        end
        S_SQJ: if (sq_done) begin
          // s_j = dot * 2^15 / (|g_x| * |g_j|), magnitude then sign
          neg      <= dot[j2][47];
          dv_num   <= (dot[j2][47] ? 64'(-dot[j2]) : 64'(dot[j2])) << 15;
          dv_den   <= 48'(root_x) * 48'(sq_root);
          dv_start <= 1'b1;
          state    <= S_DIVW;
        end
        S_DIVW: if (dv_done) begin
          logic [15:0] mag;
          mag = (dv_q > 64'd32767) ? 16'd32767 : dv_q[15:0];
          score[j2] <= neg ? -$signed(mag) : $signed(mag);
          if (j2 == XW'(N_EXPERTS-1)) begin
            state <= S_DIV;
          end else begin
            j2       <= j2 + 1'b1;
            sq_x     <= nrm[j2 + 1'b1];
            sq_start <= 1'b1;
            state    <= S_SQJ;
          end
        end
        S_DIV: begin
          // find the maximum score and its index
          logic signed [15:0] m;
          logic [XW-1:0]      mi;
          m  = score[0];
          mi = '0;
          for (int j = 1; j < N_EXPERTS; j++)
            if (score[j] > m) begin m = score[j]; mi = XW'(j); end
          smax    <= 17'(m);
          top_idx <= mi;
          j2      <= '0;
          e_sum   <= '0;
          state   <= S_EXP;
        end
        S_EXP: begin
          e_j[j2] <= e_val;
          e_sum   <= e_sum + 24'(e_val);
          if (j2 == XW'(N_EXPERTS-1)) begin
            j2    <= '0;
            state <= S_NORM;
          end else j2 <= j2 + 1'b1;
        end
        S_NORM: begin
          dv_num   <= 64'(e_j[j2]) << 16;
          dv_den   <= 48'(e_sum);
          dv_start <= 1'b1;
          state    <= S_NORMW;
        end
        S_NORMW: if (dv_done) begin
          omega[j2] <= (dv_q > 64'd65535) ? 16'hFFFF : dv_q[15:0];
          if (j2 == XW'(N_EXPERTS-1)) state <= S_DONE;
          else begin
            j2    <= j2 + 1'b1;
            state <= S_NORM;
          end
        end
        S_DONE: begin
          busy  <= 1'b0;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
