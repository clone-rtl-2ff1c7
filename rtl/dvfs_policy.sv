// dvfs_policy: the learned DVFS policy, a two-layer MLP Q-network.
//
// State in, action out: the network maps the state vector (by default the
// co-running processor intensity S_pro, the prefill time T_PRE, the per-token
// decode target T_DEC and the index of the next layer) to one Q-value per
// voltage/frequency level and returns the level with the largest Q-value:
//     h = ReLU(W1 s + b1)          (HIDDEN units)
//     Q = W2 h + b2                (N_ACT values), action = argmax Q
// With the defaults the network has 4*32+32+32*16+16 = 688 parameters, under the
// 1K the paper states. The paper trains the policy by reinforcement learning; here
// the trained weights are loaded by the host into a small table (the paper's SFU
// keeps its models in lookup tables), and evaluation uses one multiply-accumulate
// per cycle. Weights and biases are signed Q8.8, state entries signed integers;
// hidden values are shifted right by 8 (floor) and saturated to 16 bits.
// Table layout: W1[h][i] at h*N_IN+i, b1[h] at N_IN*HIDDEN+h, W2[a][h] at
// (N_IN+1)*HIDDEN + a*HIDDEN+h, b2[a] after W2.
// Latency: HIDDEN*(N_IN+1) + N_ACT*(HIDDEN+1) + 2 cycles from start to done.
// Ties go to the lower level.
module dvfs_policy #(
  parameter int unsigned N_IN   = 4,
  parameter int unsigned HIDDEN = 32,
  parameter int unsigned N_ACT  = 16,
  localparam int unsigned NPARAM = N_IN*HIDDEN + HIDDEN + HIDDEN*N_ACT + N_ACT,
  localparam int unsigned PW     = $clog2(NPARAM),
  localparam int unsigned AW     = (N_ACT > 1) ? $clog2(N_ACT) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                w_we,
  input  logic [PW-1:0]       w_addr,
  input  logic signed [15:0]  w_data,
  input  logic                start,
  input  logic signed [15:0]  state_in [N_IN],
  output logic                busy,
  output logic                done,
  output logic [AW-1:0]       action,
  output logic signed [47:0]  q_best
);
  localparam int unsigned B1_0 = N_IN * HIDDEN;
  localparam int unsigned W2_0 = B1_0 + HIDDEN;
  localparam int unsigned B2_0 = W2_0 + HIDDEN * N_ACT;

  logic signed [15:0] wmem [NPARAM];
  always_ff @(posedge clk) if (w_we) wmem[w_addr] <= w_data;

  typedef enum logic [2:0] {S_IDLE, S_L1, S_L1B, S_L2, S_L2B, S_DONE} state_e;
  state_e st;

  logic signed [15:0] s   [N_IN];
  logic signed [15:0] h   [HIDDEN];
  logic signed [47:0] acc;
  logic [$clog2(HIDDEN+1)-1:0] u;     // unit (hidden or output)
  logic [$clog2(HIDDEN+1)-1:0] k;     // input index
  logic signed [47:0] best;
  logic [AW-1:0]      best_a;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; busy <= 1'b0; done <= 1'b0; acc <= '0; u <= '0; k <= '0;
      best <= '0; best_a <= '0; action <= '0; q_best <= '0;
      for (int i = 0; i < N_IN; i++) s[i] <= '0;
      for (int i = 0; i < HIDDEN; i++) h[i] <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          for (int i = 0; i < N_IN; i++) s[i] <= state_in[i];
          busy <= 1'b1; u <= '0; k <= '0; acc <= '0; st <= S_L1;
        end
        S_L1: begin   // acc += W1[u][k] * s[k]
          acc <= acc + 48'(wmem[int'(u) * N_IN + int'(k)] * s[int'(k) % N_IN]);
          if (k == ($clog2(HIDDEN+1))'(N_IN - 1)) st <= S_L1B;
          else k <= k + 1'b1;
        end
        S_L1B: begin  // add bias, ReLU, rescale
          logic signed [47:0] t;
          t = (acc + (48'(wmem[B1_0 + int'(u)]) <<< 8)) >>> 8;
          h[int'(u) % HIDDEN] <= (t < 0) ? 16'sd0 : clone_pkg::sat16(t);
          acc  <= '0;
          k    <= '0;
          if (u == ($clog2(HIDDEN+1))'(HIDDEN - 1)) begin u <= '0; st <= S_L2; end
          else begin u <= u + 1'b1; st <= S_L1; end
        end
        S_L2: begin   // acc += W2[u][k] * h[k]
          acc <= acc + 48'(wmem[W2_0 + int'(u) * HIDDEN + int'(k)] * h[int'(k) % HIDDEN]);
          if (k == ($clog2(HIDDEN+1))'(HIDDEN - 1)) st <= S_L2B;
          else k <= k + 1'b1;
        end
        S_L2B: begin
          logic signed [47:0] qv;
          qv  = acc + (48'(wmem[B2_0 + int'(u)]) <<< 8);
          acc <= '0;
          k   <= '0;
          if (u == '0 || qv > best) begin best <= qv; best_a <= AW'(u); end
          if (u == ($clog2(HIDDEN+1))'(N_ACT - 1)) st <= S_DONE;
          else begin u <= u + 1'b1; st <= S_L2; end
        end
        S_DONE: begin
          action <= best_a;
          q_best <= best;
          busy   <= 1'b0;
          done   <= 1'b1;
          st     <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
