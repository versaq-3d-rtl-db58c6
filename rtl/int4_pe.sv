// int4_pe: the atomic processing element of the VersaQ-3D array.
//
// One 4-bit multiply and one ACC_W-bit accumulate per cycle. The paper gives
// the insides: a 4-bit multiplier, an 8-bit adder with its psum register, an
// 8-bit result register R_reg, pass registers F_reg / W_reg towards the next
// PE, a dual-mode feature multiplexer (feature or a +-1 Hadamard
// coefficient, "H?") and an "INT8?" multiplexer that sends either the running
// psum (INT4 mode) or the raw product (INT8 / BF16 mode, where the INT8 PE
// combines four products) into R_reg. R_reg can also load the result of the
// previous PE ("Last Result"), which forms the result shift chain used to
// drain the array.
//
// Design choices where the paper is silent:
//  * Each operand carries a "signed" flag; the multiplier works on 5-bit
//    sign-extended operands so the same cell serves signed INT4 nibbles, the
//    unsigned low nibble of an INT8 value and unsigned BF16 significands.
//  * R_reg is 10 bits so that it can hold a full 5x5-bit partial product
//    (15*15 = 225 needs 9 bits); in INT4 mode only its low ACC_W bits are
//    meaningful. The paper states an 8-bit R_reg.
//  * In WHT mode the coefficient is +1 or -1 chosen by h_neg; coef_hi tells
//    whether this PE holds the upper nibble of an INT8 coefficient (upper
//    nibble of +1 is 0000, of -1 is 1111; lower nibble is 0001 / 1111).
//  * The psum wraps modulo 2^ACC_W, as an 8-bit adder does.
//
// Timing: products and accumulation are registered, one operation per cycle.
// F_reg, W_reg and the feature-valid bit pass on to the neighbours after one
// cycle. clr zeroes psum (and R_reg in INT4 mode) and drops the valid bits
// leaving in that cycle, so operands still in flight from a previous mode
// cannot land in the cleared array; shift makes R_reg load last_res.
module int4_pe #(
  parameter int unsigned ACC_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             acc_mode,   // 1: INT4 accumulate, 0: product mode ("INT8?")
  input  logic             clr,
  input  logic             shift,
  input  logic             wht,        // "H?": feature replaced by +-1
  input  logic             h_neg,      // Hadamard coefficient is -1
  input  logic             coef_hi,    // this PE holds the upper nibble of the coefficient
  input  logic [3:0]       f_in,
  input  logic             f_signed,
  input  logic             f_vld_in,
  input  logic [3:0]       w_in,
  input  logic             w_signed,
  input  logic [9:0]       last_res,
  output logic [3:0]       f_out,
  output logic             f_vld_out,
  output logic [3:0]       w_out,
  output logic [9:0]       r_out,
  output logic             r_vld,
  output logic [ACC_W-1:0] psum_out
);

  logic [3:0]        coef;
  logic [3:0]        a_sel;
  logic signed [4:0] a_ext, b_ext;
  logic signed [9:0] prod;
  logic [ACC_W-1:0]  psum;
  logic [9:0]        r_reg;
  logic [ACC_W-1:0]  psum_nxt;

  always_comb begin
    coef     = h_neg ? 4'hF : (coef_hi ? 4'h0 : 4'h1);
    a_sel    = wht ? coef : f_in;
    a_ext    = {f_signed & a_sel[3], a_sel};
    b_ext    = {w_signed & w_in[3], w_in};
    prod     = a_ext * b_ext;
    psum_nxt = psum + prod[ACC_W-1:0];
  end

  // In INT4 mode R_reg is loaded with the new psum together with psum, so it
  // holds the running result and keeps it while the result chain shifts.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_out     <= '0;
      f_vld_out <= 1'b0;
      w_out     <= '0;
      psum      <= '0;
      r_reg     <= '0;
      r_vld     <= 1'b0;
    end else begin
      f_out     <= f_in;
      f_vld_out <= f_vld_in && !clr;   // clr also kills in-flight valids
      w_out     <= w_in;
      if (clr)
        psum <= '0;
      else if (acc_mode && f_vld_in)
        psum <= psum_nxt;
      r_vld <= f_vld_in && !acc_mode && !shift && !clr;
      if (shift)
        r_reg <= last_res;
      else if (acc_mode) begin
        if (clr)           r_reg <= '0;
        else if (f_vld_in) r_reg <= 10'(signed'(psum_nxt));
      end else if (f_vld_in)
        r_reg <= 10'(prod);
    end
  end

  assign r_out    = r_reg;
  assign psum_out = psum;

endmodule
