// quant_unit: on-chip BF16 -> INT precision transition, LANES lanes wide.
//
// Symmetric per-token quantization to INT4 (qmax 7) or INT8 (qmax 127).
// Stage 1: from the token's maximum absolute value (max_in, supplied by
// the dequantization unit's local max), a lookup table on the 7 mantissa
// bits gives an approximate inverse 1/max, which is multiplied by qmax to
// form the inverse scale qmax/max. Stage 2: every lane multiplies its BF16
// value by the inverse scale, rounds to the nearest integer (halves away
// from zero) and clamps to [-qmax, qmax]. The token's scale s_x = max/qmax,
// needed to dequantize the next layer, is returned on scale_out.
//
// Timing: fully pipelined, one token beat per cycle, out_vld two cycles
// after in_vld.
//
// Follows the paper's Fig. 7 (lower left: max result -> LUT -> approx inv,
// FP result x inv, round, clamp -> INT result) and Sec. 4.4. The LUT
// contents are computed at elaboration: entry m is the 7-bit mantissa of
// 2 / (1 + m/128), i.e. floor(32768 / (128 + m)) - 128, truncated. The
// rounding mode and the clamp limits are this design's choices.
module quant_unit
  import versaq_pkg::*;
#(
  parameter int unsigned LANES = 128
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_vld,
  input  logic               int4,      // 1: INT4 (qmax 7), 0: INT8 (qmax 127)
  input  logic [15:0]        max_in,    // |max| of the token, BF16
  input  logic [15:0]        in_data [LANES],
  output logic               out_vld,
  output logic signed [7:0]  out_q   [LANES],
  output logic [15:0]        scale_out
);

  localparam logic [15:0] QMAX4_BF   = 16'h40E0;  // 7.0
  localparam logic [15:0] QMAX8_BF   = 16'h42FE;  // 127.0
  localparam logic [15:0] RQMAX4_BF  = 16'h3E12;  // 1/7
  localparam logic [15:0] RQMAX8_BF  = 16'h3C01;  // 1/127

  // Approximate-inverse LUT.
  logic [6:0] inv_lut [128];
  for (genvar m = 0; m < 128; m++) begin : g_lut
    assign inv_lut[m] = (m == 0) ? 7'd0 : 7'(32768 / (128 + m) - 128);
  end

  logic [15:0] approx_inv;
  logic [15:0] inv_scale_d;
  logic [15:0] inv_scale_q;
  logic [15:0] data_q [LANES];
  logic        vld_q, int4_q;
  logic [15:0] scale_d;
  logic [15:0] scale_q;        // stage-1 copy, keeps scale_out aligned with out_q

  always_comb begin
    int e_inv;
    e_inv = (max_in[6:0] == 7'd0) ? 254 - int'(max_in[14:7]) : 253 - int'(max_in[14:7]);
    if (max_in[14:7] == 8'd0 || e_inv <= 0)
      approx_inv = 16'h0000;
    else
      approx_inv = {1'b0, 8'(e_inv), inv_lut[max_in[6:0]]};
    inv_scale_d = bf16_mul(approx_inv, int4 ? QMAX4_BF : QMAX8_BF);
    scale_d     = bf16_mul({1'b0, max_in[14:0]}, int4 ? RQMAX4_BF : RQMAX8_BF);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q       <= 1'b0;
      int4_q      <= 1'b0;
      inv_scale_q <= '0;
      out_vld     <= 1'b0;
      scale_out   <= '0;
      scale_q     <= '0;
      for (int l = 0; l < LANES; l++) begin
        data_q[l] <= '0;
        out_q[l]  <= '0;
      end
    end else begin
      vld_q   <= in_vld;
      out_vld <= vld_q;
      if (in_vld) begin
        int4_q      <= int4;
        inv_scale_q <= inv_scale_d;
        scale_q     <= scale_d;
        for (int l = 0; l < LANES; l++) data_q[l] <= in_data[l];
      end
      if (vld_q) scale_out <= scale_q;
      if (vld_q)
        for (int l = 0; l < LANES; l++)
          out_q[l] <= bf16_to_int_clamp(bf16_mul(data_q[l], inv_scale_q),
                                        int4_q ? 8'd7 : 8'd127);
    end
  end

endmodule
