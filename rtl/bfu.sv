// bfu: Bitwidth Flexible Unit = four INT8 PEs plus BF16 peripheral logic.
//
// INT4 / INT8 modes: the four INT8 PEs are four consecutive columns of one
// row of the systolic array (PE0 -> PE1 -> PE2 -> PE3 along the feature
// path); each has its own weight input from above and its own result shift
// chain.
//
// BF16 mode: the BFU is one SIMD lane running a four-stage pipeline
// (initiation interval 1, latency 4) for fpadd, fpmul and fptmp, following
// the paper's Fig. 8(c). Stage k uses INT8 PE k:
//   stage 1  PE0 ADD (fptmp only): y = 0x5F37 - (a >> 1), the BF16 seed of
//            the fast inverse square root; fpadd / fpmul bypass it.
//   stage 2  SD transform: {sign, 1.mantissa} -> two's-complement
//            significand; PE1 ADD on exponents (ea + eb - 127 for
//            fpmul/fptmp, ea - eb for fpadd).
//   stage 3  fpmul/fptmp: clamp logic limits the exponent to [0, 255] and
//            PE2 ADD forms exponent + 1 for the normaliser. fpadd: operands
//            are ordered by exponent, the 2's power LUT gives 2^(7-d) for an
//            exponent difference d <= 7 (0 beyond) and PE2 MUL aligns the
//            smaller significand by multiplying with it.
//   stage 4  fpmul/fptmp: PE3 MUL of the two 8-bit significands. fpadd:
//            PE3 ADD of (larger << 7) and the signed aligned smaller one.
//            Normalisation (leading-one detector, shift, exponent add) forms
//            the BF16 result.
// fptmp(a, b) returns b * seed(a); with b = 1.0 it is the inverse-square-
// root approximation, and further Newton steps are issued as fpmul/fpadd.
//
// Number conventions (not given by the paper; this design's choice):
// exponent 0 is treated as zero (no subnormals), results are truncated,
// exponents >= 255 give infinity, <= 0 give zero, NaN is not produced.
// The SD transform output is 9 bits wide here because the significand
// with its hidden one has 8 magnitude bits; the paper says "signed 8-bit".
// The paper draws the clamp logic ahead of the stage-3 PE; here the clamp
// acts on the stage-2 exponent sum, which is the same position in time.
module bfu
  import versaq_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  prec_mode_e  mode,
  input  logic        wht,
  input  logic        clr,
  input  logic        shift,
  // systolic ports
  input  logic [7:0]  f_in,
  input  logic [1:0]  f_vld_in,
  output logic [7:0]  f_out,
  output logic [1:0]  f_vld_out,
  input  logic [7:0]  w_in   [4],
  output logic [7:0]  w_out  [4],
  input  logic [31:0] res_in [4],
  output logic [31:0] res_out[4],
  // BF16 SIMD ports
  input  logic        bf_vld,
  input  bf_op_e      bf_op,
  input  logic [15:0] bf_a,
  input  logic [15:0] bf_b,
  output logic        bf_out_vld,
  output logic [15:0] bf_out
);

  // ---------------------------------------------------------------- PEs
  logic [7:0]         pf     [5];
  logic [1:0]         pfv    [5];
  logic               p_mul  [4];
  logic [7:0]         p_a    [4];
  logic [7:0]         p_b    [4];
  logic signed [23:0] p_x    [4];
  logic signed [23:0] p_y    [4];
  logic signed [23:0] p_res  [4];

  assign pf[0]  = f_in;
  assign pfv[0] = f_vld_in;
  assign f_out     = pf[4];
  assign f_vld_out = pfv[4];

  for (genvar k = 0; k < 4; k++) begin : g_pe
    int8_pe u_pe (
      .clk      (clk),
      .rst_n    (rst_n),
      .mode     (mode),
      .wht      (wht),
      .clr      (clr),
      .shift    (shift),
      .f_in     (pf[k]),
      .f_vld_in (pfv[k]),
      .w_in     (w_in[k]),
      .res_in   (res_in[k]),
      .f_out    (pf[k+1]),
      .f_vld_out(pfv[k+1]),
      .w_out    (w_out[k]),
      .res_out  (res_out[k]),
      .bf_op_mul(p_mul[k]),
      .bf_a     (p_a[k]),
      .bf_b     (p_b[k]),
      .bf_x     (p_x[k]),
      .bf_y     (p_y[k]),
      .bf_res   (p_res[k])
    );
  end

  // ------------------------------------------------------- stage registers
  typedef struct packed {
    logic       v;
    bf_op_e     op;
    logic [15:0] a;
    logic [15:0] b;
  } s1_t;

  typedef struct packed {
    logic       v;
    bf_op_e     op;
    logic       sa, sb;
    logic [7:0] ma, mb;        // significands with hidden one, 0 for zero
    logic [7:0] ea, eb;
    logic signed [8:0] sda, sdb;  // SD transform outputs
  } s2_t;

  typedef struct packed {
    logic       v;
    bf_op_e     op;
    logic       zero;          // fpmul: an operand is zero / exponent underflow
    logic       sign;          // fpmul: result sign; fpadd: sign of smaller operand
    logic [7:0] ec;            // fpmul: clamped exponent; fpadd: larger exponent
    logic [7:0] ma, mb;        // fpmul significands
    logic signed [8:0] sdl;    // fpadd larger significand (two's complement)
  } s3_t;

  typedef struct packed {
    logic       v;
    bf_op_e     op;
    logic       zero;
    logic       sign;
    logic [7:0] ec;
    logic [8:0] ec_p1;
  } s4_t;

  s1_t s1;
  s2_t s2, s2_d;
  s3_t s3, s3_d;
  s4_t s4, s4_d;

  logic        bf16;
  logic [15:0] a_st2;
  logic signed [9:0] e2;           // stage-3 view of the PE1 result
  logic [3:0]  dabs;
  logic        swap;
  logic [7:0]  pow2;

  assign bf16 = (mode == MODE_BF16);

  // Stage 1: PE0 computes the fptmp seed.
  always_comb begin
    p_mul[0] = 1'b0;
    p_a[0]   = '0;
    p_b[0]   = '0;
    p_x[0]   = 24'(RSQRT_MAGIC);
    p_y[0]   = -24'(bf_a >> 1);
  end

  // Stage 2: SD transform and exponent add on PE1.
  always_comb begin
    a_st2        = (s1.op == OP_FPTMP) ? p_res[0][15:0] : s1.a;
    s2_d.v       = s1.v;
    s2_d.op      = s1.op;
    s2_d.sa      = a_st2[15];
    s2_d.sb      = s1.b[15];
    s2_d.ea      = a_st2[14:7];
    s2_d.eb      = s1.b[14:7];
    s2_d.ma      = (a_st2[14:7] == 8'd0) ? 8'd0 : {1'b1, a_st2[6:0]};
    s2_d.mb      = (s1.b[14:7]  == 8'd0) ? 8'd0 : {1'b1, s1.b[6:0]};
    s2_d.sda     = s2_d.sa ? -$signed({1'b0, s2_d.ma}) : $signed({1'b0, s2_d.ma});
    s2_d.sdb     = s2_d.sb ? -$signed({1'b0, s2_d.mb}) : $signed({1'b0, s2_d.mb});
    p_mul[1]     = 1'b0;
    p_a[1]       = '0;
    p_b[1]       = '0;
    p_x[1]       = 24'(a_st2[14:7]);
    p_y[1]       = (s1.op == OP_FPADD) ? -24'(s1.b[14:7]) : 24'(s1.b[14:7]) - 24'd127;
  end

  // Stage 3: clamp logic / operand ordering, 2's power LUT, PE2.
  always_comb begin
    e2   = 10'(p_res[1]);
    swap = (e2 < 0) || (e2 == 0 && s2.mb > s2.ma);
    dabs = 4'((e2 < 0) ? ((-e2 > 10'sd15) ? 10'sd15 : -e2)
                       : ((e2 > 10'sd15) ? 10'sd15 : e2));
    pow2 = (dabs <= 4'd7) ? (8'd1 << (3'd7 - dabs[2:0])) : 8'd0;

    s3_d.v    = s2.v;
    s3_d.op   = s2.op;
    s3_d.ma   = s2.ma;
    s3_d.mb   = s2.mb;
    if (s2.op == OP_FPADD) begin
      s3_d.zero = 1'b0;
      s3_d.sign = swap ? s2.sa : s2.sb;
      s3_d.ec   = swap ? s2.eb : s2.ea;
      s3_d.sdl  = swap ? s2.sdb : s2.sda;
    end else begin
      // clamp logic: exponent limited to [0, 255]
      s3_d.zero = (s2.ma == 8'd0) || (s2.mb == 8'd0) || (e2 <= 0);
      s3_d.sign = s2.sa ^ s2.sb;
      s3_d.ec   = (e2 > 10'sd255) ? 8'd255 : (e2 < 0) ? 8'd0 : 8'(e2);
      s3_d.sdl  = '0;
    end
    p_mul[2] = (s2.op == OP_FPADD);
    p_a[2]   = swap ? s2.ma : s2.mb;       // smaller significand
    p_b[2]   = pow2;
    p_x[2]   = 24'(s3_d.ec);
    p_y[2]   = 24'd1;
  end

  // Stage 4: PE3 multiply / add.
  always_comb begin
    s4_d.v     = s3.v;
    s4_d.op    = s3.op;
    s4_d.zero  = s3.zero;
    s4_d.sign  = s3.sign;
    s4_d.ec    = s3.ec;
    s4_d.ec_p1 = 9'(p_res[2]);
    p_mul[3]   = (s3.op != OP_FPADD);
    p_a[3]     = s3.ma;
    p_b[3]     = s3.mb;
    p_x[3]     = 24'(s3.sdl) <<< 7;
    p_y[3]     = s3.sign ? -p_res[2] : p_res[2];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0;
      s2 <= '0;
      s3 <= '0;
      s4 <= '0;
    end else begin
      s1.v  <= bf_vld && bf16;
      s1.op <= bf_op;
      s1.a  <= bf_a;
      s1.b  <= bf_b;
      s2    <= s2_d;
      s3    <= s3_d;
      s4    <= s4_d;
    end
  end

  // Normalisation.
  logic [23:0] mag;
  logic        neg;
  int          lead;
  int          enew;
  logic [23:0] nrm;
  always_comb begin
    bf_out = '0;
    neg    = 1'b0;
    mag    = '0;
    lead   = -1;
    enew   = 0;
    nrm    = '0;
    if (s4.op == OP_FPADD) begin
      neg = p_res[3][23];
      mag = neg ? 24'(-p_res[3]) : 24'(p_res[3]);
      for (int i = 0; i < 17; i++) if (mag[i]) lead = i;
      if (lead >= 0) begin
        enew = int'(s4.ec) + lead - 14;
        nrm  = mag << (23 - lead);          // leading one at bit 23
        if (enew >= 255)     bf_out = {neg, 8'hFF, 7'd0};
        else if (enew <= 0)  bf_out = {neg, 15'd0};
        else                 bf_out = {neg, 8'(enew), nrm[22:16]};
      end
    end else begin
      if (s4.zero)
        bf_out = {s4.sign, 15'd0};
      else if (p_res[3][15]) begin
        if (s4.ec_p1 >= 9'd255) bf_out = {s4.sign, 8'hFF, 7'd0};
        else                    bf_out = {s4.sign, s4.ec_p1[7:0], p_res[3][14:8]};
      end else begin
        if (s4.ec == 8'd255)    bf_out = {s4.sign, 8'hFF, 7'd0};
        else                    bf_out = {s4.sign, s4.ec, p_res[3][13:7]};
      end
    end
  end
  assign bf_out_vld = s4.v;

endmodule
