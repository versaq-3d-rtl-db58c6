// dequant_unit: on-chip INT -> BF16 precision transition behind the PE
// array, LANES lanes wide, plus the token max tracker used by quantization.
//
// Per lane (stage 1): the INT partial-sum result of the PE array is
// converted to BF16 and multiplied by that lane's pre-computed scale
// s_w * s_x (weight scale of the output channel times the activation scale
// of the token). Stage 2: |abs| of every enabled lane, a 7-level compare
// tree (128 -> 1) and a "local max" register per token that keeps the
// running maximum across all column tiles of that token. max_result reads
// the local max of token rd_tok (combinational read).
//
// Timing: out_data / out_vld one cycle after in_vld; the local max of the
// token given with a beat is updated one cycle after out_vld. max_clr
// zeroes all local max registers (start of a new layer).
//
// Follows the paper's Fig. 7 (lower right: PE result x s_w*s_x, |abs|,
// 7-level compare, local max) and Sec. 4.4. The paper's Table 3 lists
// "scale and ABS value lanes + comparator" under the quant unit and "clamp &
// round" under the dequant unit, the figure the other way round; this
// design follows the figure and the text. BF16 arithmetic truncates and
// flushes subnormals (versaq_pkg); NTOK and the lane mask are this
// design's choices.
module dequant_unit
  import versaq_pkg::*;
#(
  parameter int unsigned LANES = 128,
  parameter int unsigned NTOK  = 128,
  localparam int unsigned TW   = $clog2(NTOK),
  localparam int unsigned LVL  = $clog2(LANES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_vld,
  input  logic [LANES-1:0]   in_mask,
  input  logic [TW-1:0]      in_tok,
  input  logic [31:0]        in_data [LANES],
  input  logic [15:0]        scale   [LANES],
  input  logic               max_clr,
  output logic               out_vld,
  output logic [15:0]        out_data[LANES],
  input  logic [TW-1:0]      rd_tok,
  output logic [15:0]        max_result
);

  logic [LANES-1:0] mask_q;
  logic [TW-1:0]    tok_q;
  logic [14:0]      lmax [NTOK];
  logic [14:0]      tree [LVL+1][LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_vld <= 1'b0;
      mask_q  <= '0;
      tok_q   <= '0;
      for (int l = 0; l < LANES; l++) out_data[l] <= '0;
    end else begin
      out_vld <= in_vld;
      mask_q  <= in_mask;
      tok_q   <= in_tok;
      if (in_vld)
        for (int l = 0; l < LANES; l++)
          out_data[l] <= in_mask[l] ? bf16_mul(int_to_bf16(in_data[l]), scale[l]) : 16'h0000;
    end
  end

  // |abs| and the compare tree (LVL levels, 7 for 128 lanes).
  always_comb begin
    for (int l = 0; l < LANES; l++)
      tree[0][l] = mask_q[l] ? out_data[l][14:0] : 15'd0;
    for (int v = 1; v <= LVL; v++)
      for (int l = 0; l < LANES; l++)
        if (l < (LANES >> v))
          tree[v][l] = (tree[v-1][2*l] > tree[v-1][2*l+1]) ? tree[v-1][2*l] : tree[v-1][2*l+1];
        else
          tree[v][l] = 15'd0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < NTOK; t++) lmax[t] <= '0;
    end else if (max_clr) begin
      for (int t = 0; t < NTOK; t++) lmax[t] <= '0;
    end else if (out_vld && tree[LVL][0] > lmax[tok_q]) begin
      lmax[tok_q] <= tree[LVL][0];
    end
  end

  assign max_result = {1'b0, lmax[rd_tok]};

endmodule
