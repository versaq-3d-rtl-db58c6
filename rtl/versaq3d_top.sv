// versaq3d_top: the VersaQ-3D accelerator.
//
// A reconfigurable array of 16 BFU tiles x 64 BFUs runs the linear layers
// of a quantized vision transformer as a 64 x 64 INT8 or 128 x 128 INT4
// output-stationary systolic array (also the online Walsh-Hadamard
// transform, with +-1 coefficients made inside the PEs), and the BF16
// non-linear arithmetic as a 1024-lane SIMD unit. Around it sit the
// double-buffered weight buffer (2 x 128 KB), the input buffer (128 KB),
// the output buffer (256 KB), the per-tile BFU buffers, and the
// dequantization / quantization units that move results between INT and
// BF16 on chip. The attention tiling sequencer produces the two-stage
// recomputation schedule for long-sequence global attention.
//
// Commands (cmd_t, valid/ready; one at a time, cmd_done pulses at the end):
//  OPC_GEMM  clear the array, stream k_len beats from input buffer
//            [in_base..] and weight buffer [w_base..] through it, wait for
//            the wavefront to leave, drain the results row by row through
//            the dequantization unit (per-lane scales deq_scale) into output
//            buffer words [out_base + row], and track each row's max |x|.
//            INT8: 64 rows of 64 results (lanes 0-63); INT4: 128 rows of 128.
//            wht = 1 makes it a Hadamard pass (weights = data to transform).
//  OPC_QUANT for rows tokens: read output buffer [out_base + t], quantize
//            with that token's max to INT4 / INT8, write input buffer
//            [in_base + t] (INT4: 128 nibbles, INT8: lanes 0-63 as bytes),
//            and report the token scale on q_scale.
//  OPC_BF16  issue one BF16 operation to the selected tiles (operands from
//            BFU buffer ra / rb), optionally write the result back (wb, wa)
//            and / or forward one tile's 64 results to half of output buffer
//            word out_base.
// Host / DRAM side: fill ports for the input, weight and BFU buffers, a read
// port for the output buffer, the weight-buffer swap. The off-chip DRAM is
// outside this design.
//
// The sequencing FSM, the command format, the buffer word layouts and all
// latencies are this design's choices; the paper gives the blocks, their
// sizes and the data paths of its Fig. 7 (weight and input buffers feed the
// array, the array feeds the output buffer through the quant/dequant path,
// the output buffer feeds the input buffer).
module versaq3d_top
  import versaq_pkg::*;
#(
  parameter int unsigned NTILES    = 16,
  parameter int unsigned NBFU      = 64,
  parameter int unsigned ROWS      = 4,
  parameter int unsigned BFU_DEPTH = 16,
  parameter int unsigned IN_DEPTH  = 2048,   // 128 KB of 512-bit words
  parameter int unsigned W_DEPTH   = 2048,   // 128 KB per bank
  parameter int unsigned OUT_DEPTH = 1024,   // 256 KB of 2048-bit words
  localparam int unsigned N        = NTILES * ROWS,    // INT8 rows
  localparam int unsigned M        = NBFU / ROWS * 4,  // INT8 columns
  localparam int unsigned LANES    = 2 * M,            // INT4 columns
  localparam int unsigned IAW      = $clog2(IN_DEPTH),
  localparam int unsigned WAW      = $clog2(W_DEPTH),
  localparam int unsigned OAW      = $clog2(OUT_DEPTH),
  localparam int unsigned BAW      = $clog2(BFU_DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // command port
  input  logic                 cmd_vld,
  output logic                 cmd_rdy,
  input  cmd_t                 cmd,
  output logic                 cmd_done,
  // dequantization scales s_w * s_x per output lane (BF16)
  input  logic [15:0]          deq_scale [LANES],
  // quantization result: scale of the token just written
  output logic                 q_scale_vld,
  output logic [15:0]          q_scale,
  // host / DRAM side
  input  logic                 in_fill_we,
  input  logic [IAW-1:0]       in_fill_wa,
  input  logic [N*8-1:0]       in_fill_wd,
  input  logic                 w_fill_we,
  input  logic [WAW-1:0]       w_fill_wa,
  input  logic [M*8-1:0]       w_fill_wd,
  input  logic                 w_swap,
  output logic                 w_rd_bank,
  input  logic [NTILES-1:0]    bf_fill_we,
  input  logic [BAW-1:0]       bf_fill_wa,
  input  logic [NBFU*16-1:0]   bf_fill_wd,
  input  logic                 ob_re,
  input  logic [OAW-1:0]       ob_ra,
  output logic [LANES*16-1:0]  ob_rd,
  // attention tiling schedule
  input  logic                 attn_start,
  input  logic [15:0]          attn_n,
  output logic                 attn_busy,
  output logic                 attn_done,
  output logic                 attn_cmd_vld,
  input  logic                 attn_cmd_rdy,
  output logic [1:0]           attn_cmd_kind,
  output logic [15:0]          attn_cmd_q,
  output logic [15:0]          attn_cmd_k,
  output logic [15:0]          attn_cmd_v,
  output logic [15:0]          attn_s1_cnt,   // stage-1 K-tile passes
  output logic [15:0]          attn_s2_cnt,   // stage-2 K-tile passes
  output logic [15:0]          attn_ow_cnt    // O tiles written off-chip
);

  localparam int unsigned FLUSH = 4 * N + 8;   // wavefront drain time (INT4 worst case)

  typedef enum logic [3:0] {
    T_IDLE, T_CLR, T_FEED, T_FLUSH, T_DRAIN, T_TAIL, T_QRUN, T_QTAIL, T_BISSUE, T_BWAIT
  } state_e;

  state_e      state;
  cmd_t        c;
  logic [11:0] cnt;
  logic        sub;

  // ------------------------------------------------------------ buffers
  logic               in_re;
  logic [IAW-1:0]     in_ra;
  logic [N*8-1:0]     in_rd;
  logic               in_we;
  logic [IAW-1:0]     in_wa;
  logic [N*8-1:0]     in_wd;

  logic               w_re;
  logic [WAW-1:0]     w_ra;
  logic [M*8-1:0]     w_rd;

  logic               o_re;
  logic [OAW-1:0]     o_ra;
  logic [1:0]         o_we;
  logic [OAW-1:0]     o_wa;
  logic [LANES*16-1:0] o_wd;

  act_buffer #(.GROUPS(1), .GW(N*8), .DEPTH(IN_DEPTH)) u_inbuf (
    .clk(clk), .re(in_re), .ra(in_ra), .rd(in_rd),
    .we(in_we), .wa(in_wa), .wd(in_wd)
  );

  weight_buffer #(.WIDTH(M*8), .DEPTH(W_DEPTH)) u_wbuf (
    .clk(clk), .rst_n(rst_n), .swap(w_swap), .rd_bank(w_rd_bank),
    .re(w_re), .ra(w_ra), .rd(w_rd),
    .we(w_fill_we), .wa(w_fill_wa), .wd(w_fill_wd)
  );

  act_buffer #(.GROUPS(2), .GW(LANES*8), .DEPTH(OUT_DEPTH)) u_outbuf (
    .clk(clk), .re(o_re), .ra(o_ra), .rd(ob_rd),
    .we(o_we), .wa(o_wa), .wd(o_wd)
  );

  // ------------------------------------------------------------ PE array
  logic               clr, shift;
  logic               beat_vld;
  logic [6:0]         k_idx;
  logic [31:0]        res_out [M];
  logic               bf_issue;
  logic [NTILES-1:0]  bf_res_vld;
  logic [NBFU*16-1:0] bf_res_word [NTILES];

  pe_array #(.NTILES(NTILES), .NBFU(NBFU), .ROWS(ROWS), .DEPTH(BFU_DEPTH)) u_array (
    .clk      (clk),
    .rst_n    (rst_n),
    .mode     (c.opc == OPC_BF16 ? MODE_BF16 : c.mode),
    .wht      (c.wht),
    .clr      (clr),
    .shift    (shift),
    .beat_vld (beat_vld),
    .k_idx    (k_idx),
    .f_word   (in_rd),
    .w_word   (w_rd),
    .res_out  (res_out),
    .bf_tiles (c.tiles[NTILES-1:0]),
    .bf_issue (bf_issue),
    .bf_op    (c.bf_op),
    .ra_a     (BAW'(c.ra)),
    .ra_b     (BAW'(c.rb)),
    .wb       (c.wb),
    .wa       (BAW'(c.wa)),
    .fill_we  (bf_fill_we),
    .fill_wa  (bf_fill_wa),
    .fill_wd  (bf_fill_wd),
    .res_vld  (bf_res_vld),
    .res_word (bf_res_word)
  );

  // ------------------------------------------------- dequant / quant path
  logic               dq_vld;
  logic [LANES-1:0]   dq_mask;
  logic [6:0]         dq_tok;
  logic [31:0]        dq_in  [LANES];
  logic               dq_out_vld;
  logic [15:0]        dq_out [LANES];
  logic [6:0]         dq_rd_tok;
  logic [15:0]        dq_max;
  logic [6:0]         tok_q;
  logic               int4_q;

  dequant_unit #(.LANES(LANES), .NTOK(128)) u_deq (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_vld    (dq_vld),
    .in_mask   (dq_mask),
    .in_tok    (dq_tok),
    .in_data   (dq_in),
    .scale     (deq_scale),
    .max_clr   (clr && c.max_clr),
    .out_vld   (dq_out_vld),
    .out_data  (dq_out),
    .rd_tok    (dq_rd_tok),
    .max_result(dq_max)
  );

  logic               q_in_vld;
  logic [15:0]        q_in [LANES];
  logic               q_out_vld;
  logic signed [7:0]  q_out [LANES];
  logic [IAW-1:0]     q_wa_pipe [3];
  logic               q_rd_vld;
  logic [6:0]         q_tok;      // token whose output-buffer word is on ob_rd

  quant_unit #(.LANES(LANES)) u_q (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_vld   (q_in_vld),
    .int4     (c.q_int4),
    .max_in   (dq_max),
    .in_data  (q_in),
    .out_vld  (q_out_vld),
    .out_q    (q_out),
    .scale_out(q_scale)
  );
  assign q_scale_vld = q_out_vld;

  for (genvar l = 0; l < LANES; l++) begin : g_qin
    assign q_in[l] = ob_rd[l*16 +: 16];
  end

  // ------------------------------------------------------- attention seq
  attn_tiling_seq #(.T_Q(64), .T_K(64), .T_V(2048), .NW(16)) u_attn (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (attn_start),
    .n_tokens  (attn_n),
    .busy      (attn_busy),
    .done      (attn_done),
    .cmd_vld   (attn_cmd_vld),
    .cmd_rdy   (attn_cmd_rdy),
    .cmd_kind  (attn_cmd_kind),
    .cmd_q     (attn_cmd_q),
    .cmd_k     (attn_cmd_k),
    .cmd_v     (attn_cmd_v),
    .stage1_cnt(attn_s1_cnt),
    .stage2_cnt(attn_s2_cnt),
    .owrite_cnt(attn_ow_cnt)
  );

  // ------------------------------------------------------------- control
  assign cmd_rdy = (state == T_IDLE);

  logic       last_row;
  logic [6:0] drain_tok;
  assign last_row = (cnt == 12'(N - 1));

  always_comb begin
    // array drain: bottom row first
    if (c.mode == MODE_INT4)
      drain_tok = 7'(2 * (N - 1 - int'(cnt)) + (sub ? 0 : 1));
    else
      drain_tok = 7'(N - 1 - int'(cnt));
    for (int l = 0; l < LANES; l++) dq_in[l] = '0;
    dq_mask = '0;
    if (c.mode == MODE_INT4) begin
      dq_mask = '1;
      for (int col = 0; col < M; col++) begin
        if (!sub) begin   // odd INT4 row of the block: R2, R3
          dq_in[2*col]   = 32'(signed'(res_out[col][23:16]));
          dq_in[2*col+1] = 32'(signed'(res_out[col][31:24]));
        end else begin    // even INT4 row: R0, R1
          dq_in[2*col]   = 32'(signed'(res_out[col][7:0]));
          dq_in[2*col+1] = 32'(signed'(res_out[col][15:8]));
        end
      end
    end else begin
      dq_mask[M-1:0] = '1;
      for (int col = 0; col < M; col++) dq_in[col] = res_out[col];
    end
  end

  assign dq_vld    = (state == T_DRAIN);
  assign dq_tok    = drain_tok;
  assign shift     = (state == T_DRAIN) && (c.mode != MODE_INT4 || sub);
  assign clr       = (state == T_CLR);
  assign bf_issue  = (state == T_BISSUE);

  // buffer port multiplexing: the sequencer has priority over the host
  always_comb begin
    in_re = (state == T_FEED);
    in_ra = IAW'(c.in_base) + IAW'(cnt);
    w_re  = (state == T_FEED);
    w_ra  = WAW'(c.w_base) + WAW'(cnt);

    o_re  = (state == T_QRUN) ? 1'b1 : ob_re;
    o_ra  = (state == T_QRUN) ? OAW'(c.out_base) + OAW'(cnt) : ob_ra;

    if (q_out_vld) begin
      in_we = 1'b1;
      in_wa = q_wa_pipe[2];
      in_wd = '0;
      for (int l = 0; l < LANES; l++) begin
        if (int4_q) in_wd[l*4 +: 4] = q_out[l][3:0];
        else if (l < N) in_wd[l*8 +: 8] = q_out[l];
      end
    end else begin
      in_we = in_fill_we && (state == T_IDLE);
      in_wa = in_fill_wa;
      in_wd = in_fill_wd;
    end

    o_we = '0;
    o_wa = OAW'(c.out_base) + OAW'(tok_q);
    o_wd = '0;
    for (int l = 0; l < LANES; l++) o_wd[l*16 +: 16] = dq_out[l];
    if (dq_out_vld) begin
      o_we = int4_q ? 2'b11 : 2'b01;
    end else if (state == T_BWAIT && c.fwd && bf_res_vld[c.fwd_tile]) begin
      o_wa = OAW'(c.out_base);
      o_we = c.fwd_half ? 2'b10 : 2'b01;
      o_wd = {2{bf_res_word[c.fwd_tile]}};
    end
  end

  // the quantizer takes a token's word and its max in the same cycle
  assign q_in_vld  = q_rd_vld;
  assign dq_rd_tok = q_rd_vld ? q_tok : tok_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= T_IDLE;
      c         <= '0;
      cnt       <= '0;
      sub       <= 1'b0;
      cmd_done  <= 1'b0;
      beat_vld  <= 1'b0;
      k_idx     <= '0;
      tok_q     <= '0;
      int4_q    <= 1'b0;
      q_tok     <= '0;
      q_rd_vld  <= 1'b0;
      for (int k = 0; k < 3; k++) q_wa_pipe[k] <= '0;
    end else begin
      cmd_done  <= 1'b0;
      beat_vld  <= (state == T_FEED);
      k_idx     <= 7'(cnt);
      if (dq_vld) tok_q <= dq_tok;
      q_rd_vld  <= (state == T_QRUN);
      q_tok     <= 7'(cnt);
      q_wa_pipe[0] <= IAW'(c.in_base) + IAW'(cnt);
      q_wa_pipe[1] <= q_wa_pipe[0];
      q_wa_pipe[2] <= q_wa_pipe[1];
      unique case (state)
        T_IDLE: if (cmd_vld) begin
          c      <= cmd;
          cnt    <= '0;
          sub    <= 1'b0;
          int4_q <= (cmd.opc == OPC_QUANT) ? cmd.q_int4 : (cmd.mode == MODE_INT4);
          unique case (cmd.opc)
            OPC_GEMM:  state <= T_CLR;
            OPC_QUANT: state <= T_QRUN;
            default:   state <= T_BISSUE;
          endcase
        end
        T_CLR: state <= T_FEED;
        T_FEED: begin
          if (cnt == c.k_len - 1'b1) begin
            cnt   <= '0;
            state <= T_FLUSH;
          end else cnt <= cnt + 1'b1;
        end
        T_FLUSH: begin
          if (cnt == 12'(FLUSH)) begin
            cnt   <= '0;
            state <= T_DRAIN;
          end else cnt <= cnt + 1'b1;
        end
        T_DRAIN: begin
          if (c.mode == MODE_INT4 && !sub) sub <= 1'b1;
          else begin
            sub <= 1'b0;
            if (last_row) begin
              cnt   <= '0;
              state <= T_TAIL;
            end else cnt <= cnt + 1'b1;
          end
        end
        T_TAIL: begin
          state    <= T_IDLE;
          cmd_done <= 1'b1;
        end
        T_QRUN: begin
          if (cnt == 12'(c.rows) - 1'b1) begin
            cnt   <= '0;
            state <= T_QTAIL;
          end else cnt <= cnt + 1'b1;
        end
        T_QTAIL: begin
          if (cnt == 12'd3) begin
            state    <= T_IDLE;
            cmd_done <= 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        T_BISSUE: state <= T_BWAIT;
        T_BWAIT: begin
          if (cnt == 12'd4) begin
            state    <= T_IDLE;
            cmd_done <= 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        default: state <= T_IDLE;
      endcase
    end
  end

endmodule
