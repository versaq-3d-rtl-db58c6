// int8_pe: four INT4 PEs composed into one INT8 processing element.
//
// Three precision modes, as in the paper's INT8 PE:
//  * INT4: the four INT4 PEs form a 2x2 output-stationary systolic block.
//    Feature byte = {row 2r+1 nibble, row 2r nibble}, weight byte =
//    {column 2c+1 nibble, column 2c nibble}. PE0 top-left, PE1 top-right,
//    PE2 bottom-left, PE3 bottom-right; features move right and weights
//    down through the INT4 PEs' F_reg / W_reg, one INT4 hop per cycle.
//    The result word is {R3, R2, R1, R0}, 8 bits each.
//  * INT8: feature and weight are split into high and low nibbles and the
//    four INT4 PEs form the partial products (PE3 = Fh*Wh, PE2 = Fh*Wl,
//    PE1 = Fl*Wh, PE0 = Fl*Wl); a shift-and-add tree combines them and the
//    INT8-level accumulator ACC adds the product every valid cycle. High
//    nibbles are signed, low nibbles unsigned. Feature and weight pass to the
//    neighbours after one cycle.
//  * BF16: the same INT8 product is formed from unsigned 8-bit significands
//    (bf_op_mul) but ACC is bypassed; alternatively (bf_op_mul = 0) the
//    accumulator adder adds bf_x + bf_y. Either result appears on bf_res one
//    cycle after the operands, so the PE doubles as a BFU pipeline stage.
//
// WHT mode (wht = 1, INT4 or INT8): the INT4 PEs' feature multiplexers
// replace the feature by a +-1 coefficient whose sign travels in bit 0 of
// the feature nibble (INT4) or byte (INT8); the data to be transformed
// arrives on the weight path.
//
// Result drain: with shift = 1 the result word loads res_in (from the PE
// above) and res_out presents it to the PE below.
//
// Design choices: ACC is 32 bits (the paper gives no width); the operand
// packing, the partial-product assignment to PE0..PE3 and the valid bits
// are this design's own. The split into signed high nibble and unsigned
// low nibble follows the paper's "split into high and low 4-bit segments,
// ... combined through shifting and an adder tree".
module int8_pe
  import versaq_pkg::*;
#(
  parameter int unsigned ACC_W = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  prec_mode_e         mode,
  input  logic               wht,
  input  logic               clr,
  input  logic               shift,
  // systolic ports
  input  logic [7:0]         f_in,
  input  logic [1:0]         f_vld_in,
  input  logic [7:0]         w_in,
  input  logic [31:0]        res_in,
  output logic [7:0]         f_out,
  output logic [1:0]         f_vld_out,
  output logic [7:0]         w_out,
  output logic [31:0]        res_out,
  // BF16-mode helper ports
  input  logic               bf_op_mul,
  input  logic [7:0]         bf_a,
  input  logic [7:0]         bf_b,
  input  logic signed [23:0] bf_x,
  input  logic signed [23:0] bf_y,
  output logic signed [23:0] bf_res
);

  logic [3:0] f4 [4];
  logic [3:0] w4 [4];
  logic       fs [4];
  logic       ws [4];
  logic       fv [4];
  logic       hn [4];
  logic       chi[4];
  logic [9:0] last[4];
  logic [3:0] fo [4];
  logic       fvo[4];
  logic [3:0] wo [4];
  logic [9:0] ro [4];
  logic       rv [4];
  logic [7:0] unused_psum[4];

  logic       int4, int8, bf16;
  logic [7:0] fa, wa;
  logic       fvld8;
  logic signed [ACC_W-1:0] acc;
  logic signed [19:0]      tree;
  logic signed [23:0]      add_q;
  logic                    mul_q;

  assign int4 = (mode == MODE_INT4);
  assign int8 = (mode == MODE_INT8);
  assign bf16 = (mode == MODE_BF16);

  // Operand selection: in BF16 mode the multiplier is fed from bf_a / bf_b.
  assign fa    = bf16 ? bf_a : f_in;
  assign wa    = bf16 ? bf_b : w_in;
  assign fvld8 = bf16 ? bf_op_mul : f_vld_in[0];

  always_comb begin
    if (int4) begin
      f4[0] = f_in[3:0]; w4[0] = w_in[3:0]; fv[0] = f_vld_in[0];
      f4[1] = fo[0];     w4[1] = w_in[7:4]; fv[1] = fvo[0];
      f4[2] = f_in[7:4]; w4[2] = wo[0];     fv[2] = f_vld_in[1];
      f4[3] = fo[2];     w4[3] = wo[1];     fv[3] = fvo[2];
      hn[0] = f_in[0];   hn[1] = fo[0][0];  hn[2] = f_in[4];   hn[3] = fo[2][0];
      for (int k = 0; k < 4; k++) begin
        fs[k] = 1'b1; ws[k] = 1'b1; chi[k] = 1'b0;
      end
    end else begin
      // PE0 = Fl*Wl, PE1 = Fl*Wh, PE2 = Fh*Wl, PE3 = Fh*Wh
      f4[0] = fa[3:0]; w4[0] = wa[3:0];
      f4[1] = fa[3:0]; w4[1] = wa[7:4];
      f4[2] = fa[7:4]; w4[2] = wa[3:0];
      f4[3] = fa[7:4]; w4[3] = wa[7:4];
      fs[0] = 1'b0;  ws[0] = 1'b0;
      fs[1] = 1'b0;  ws[1] = !bf16;
      fs[2] = !bf16; ws[2] = 1'b0;
      fs[3] = !bf16; ws[3] = !bf16;
      chi[0] = 1'b0; chi[1] = 1'b0; chi[2] = 1'b1; chi[3] = 1'b1;
      for (int k = 0; k < 4; k++) begin
        fv[k] = fvld8;
        hn[k] = fa[0];
      end
    end
    if (int4) begin
      last[0] = {{2{res_in[7]}},  res_in[7:0]};
      last[1] = {{2{res_in[15]}}, res_in[15:8]};
      last[2] = {{2{res_in[23]}}, res_in[23:16]};
      last[3] = {{2{res_in[31]}}, res_in[31:24]};
    end else begin
      for (int k = 0; k < 4; k++) last[k] = '0;
    end
  end

  for (genvar k = 0; k < 4; k++) begin : g_pe
    int4_pe #(.ACC_W(8)) u_pe (
      .clk      (clk),
      .rst_n    (rst_n),
      .acc_mode (int4),
      .clr      (clr),
      .shift    (shift && int4),
      .wht      (wht && !bf16),
      .h_neg    (hn[k]),
      .coef_hi  (chi[k]),
      .f_in     (f4[k]),
      .f_signed (fs[k]),
      .f_vld_in (fv[k]),
      .w_in     (w4[k]),
      .w_signed (ws[k]),
      .last_res (last[k]),
      .f_out    (fo[k]),
      .f_vld_out(fvo[k]),
      .w_out    (wo[k]),
      .r_out    (ro[k]),
      .r_vld    (rv[k]),
      .psum_out (unused_psum[k])
    );
  end

  // Shift-and-add tree over the four registered partial products.
  always_comb begin
    tree = (20'(signed'(ro[3])) <<< 8)
         + (20'(signed'(ro[2])) <<< 4)
         + (20'(signed'(ro[1])) <<< 4)
         +  20'(signed'(ro[0]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      add_q <= '0;
      mul_q <= 1'b0;
    end else begin
      mul_q <= bf_op_mul;
      if (int8) begin
        if (shift)      acc <= ACC_W'(signed'(res_in));
        else if (clr)   acc <= '0;
        else if (rv[0]) acc <= acc + ACC_W'(tree);
      end
      if (bf16 && !bf_op_mul)
        add_q <= bf_x + bf_y;
    end
  end

  always_comb begin
    if (int4) begin
      f_out     = {fo[3], fo[1]};
      f_vld_out = {fvo[3], fvo[1]};
      w_out     = {wo[3], wo[2]};
      res_out   = {ro[3][7:0], ro[2][7:0], ro[1][7:0], ro[0][7:0]};
    end else begin
      // INT8: PE3 carries Fh, PE1 carries Fl; PE3 carries Wh, PE2 carries Wl.
      f_out     = {fo[3], fo[1]};
      f_vld_out = {fvo[1], fvo[1]};
      w_out     = {wo[3], wo[2]};
      res_out   = 32'(acc);
    end
    bf_res = mul_q ? 24'(tree) : add_q;
  end

endmodule
