// attn_tiling_seq: schedule generator for the two-stage recomputation-based
// tiling of long-sequence global attention (the paper's Algorithm 1).
//
// For a sequence of N tokens it emits, for every Q tile i (T_Q rows):
//   stage 1: one CMD_STATS per K tile j (T_K keys): compute S = Q_i K_j^T,
//            dequantize, update the running row max M_i and exp-sum Sigma_i;
//   stage 2: for every V tile n (T_V keys) one CMD_SOFTMAX per K tile m
//            inside it (recompute S, apply exp(S - M_i) / Sigma_i with the
//            final statistics, quantize), then one CMD_SV to accumulate
//            S_{i,n} V_n into O_i;
//   finally one CMD_OWRITE: O_i is complete and written off-chip once.
// K tile indices are global (0 .. N_K-1); a partial last V tile only
// covers the K tiles that exist. Tile counts are ceil(N / T).
//
// Interface: start (with n_tokens) begins a schedule; commands leave on a
// valid/ready handshake (a command is taken when cmd_vld && cmd_rdy);
// done pulses for one cycle after the last CMD_OWRITE is taken. The
// counters of O writes and K-tile passes let a caller check the O(N) write
// traffic.
//
// Follows Algorithm 1 and Sec. 4.5 of the paper (T_Q = T_K = 64,
// T_V = 2048). The command encoding and the handshake are this design's
// choices; the commands drive the PE array, the BFUs and the DMA, which
// the paper does not detail.
module attn_tiling_seq #(
  parameter int unsigned T_Q = 64,
  parameter int unsigned T_K = 64,
  parameter int unsigned T_V = 2048,
  parameter int unsigned NW  = 16      // width of the token count
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] n_tokens,
  output logic          busy,
  output logic          done,
  output logic          cmd_vld,
  input  logic          cmd_rdy,
  output logic [1:0]    cmd_kind,   // 0 STATS, 1 SOFTMAX, 2 SV, 3 OWRITE
  output logic [NW-1:0] cmd_q,      // Q tile
  output logic [NW-1:0] cmd_k,      // global K tile (STATS, SOFTMAX)
  output logic [NW-1:0] cmd_v,      // V tile (SOFTMAX, SV)
  output logic [NW-1:0] stage1_cnt, // K-tile score passes in stage 1
  output logic [NW-1:0] stage2_cnt, // K-tile score passes in stage 2
  output logic [NW-1:0] owrite_cnt  // O tiles written off-chip
);

  localparam int unsigned KPV = T_V / T_K;   // K tiles per V tile

  typedef enum logic [2:0] {S_IDLE, S_STATS, S_SOFTMAX, S_SV, S_OWRITE} state_e;
  state_e state;

  logic [NW-1:0] nq, nk, nv;
  logic [NW-1:0] qi, kj, vn;
  logic [NW-1:0] m;
  logic          take;

  assign take    = cmd_vld && cmd_rdy;
  assign busy    = (state != S_IDLE);
  assign cmd_vld = busy;
  assign cmd_q   = qi;
  assign cmd_v   = vn;
  assign cmd_k   = (state == S_SOFTMAX) ? NW'(vn * KPV + m) : kj;

  always_comb begin
    unique case (state)
      S_STATS:   cmd_kind = 2'd0;
      S_SOFTMAX: cmd_kind = 2'd1;
      S_SV:      cmd_kind = 2'd2;
      default:   cmd_kind = 2'd3;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      nq         <= '0;
      nk         <= '0;
      nv         <= '0;
      qi         <= '0;
      kj         <= '0;
      vn         <= '0;
      m          <= '0;
      done       <= 1'b0;
      stage1_cnt <= '0;
      stage2_cnt <= '0;
      owrite_cnt <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start && n_tokens != '0) begin
          nq         <= NW'((n_tokens + NW'(T_Q - 1)) / NW'(T_Q));
          nk         <= NW'((n_tokens + NW'(T_K - 1)) / NW'(T_K));
          nv         <= NW'((n_tokens + NW'(T_V - 1)) / NW'(T_V));
          qi         <= '0;
          kj         <= '0;
          vn         <= '0;
          m          <= '0;
          stage1_cnt <= '0;
          stage2_cnt <= '0;
          owrite_cnt <= '0;
          state      <= S_STATS;
        end
        S_STATS: if (take) begin
          stage1_cnt <= stage1_cnt + 1'b1;
          if (kj == nk - 1'b1) begin
            kj    <= '0;
            vn    <= '0;
            m     <= '0;
            state <= S_SOFTMAX;
          end else begin
            kj <= kj + 1'b1;
          end
        end
        S_SOFTMAX: if (take) begin
          stage2_cnt <= stage2_cnt + 1'b1;
          if (m == NW'(KPV - 1) || NW'(vn * KPV + m) == nk - 1'b1) begin
            m     <= '0;
            state <= S_SV;
          end else begin
            m <= m + 1'b1;
          end
        end
        S_SV: if (take) begin
          if (vn == nv - 1'b1) state <= S_OWRITE;
          else begin
            vn    <= vn + 1'b1;
            state <= S_SOFTMAX;
          end
        end
        S_OWRITE: if (take) begin
          owrite_cnt <= owrite_cnt + 1'b1;
          if (qi == nq - 1'b1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            qi    <= qi + 1'b1;
            state <= S_STATS;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
