// tb_int4_pe: self-checking test of the INT4 PE.
// Checks INT4 accumulation (wrapping at 8 bits), the product mode with all
// signed/unsigned operand combinations, the +-1 Hadamard multiplexer, the
// F_reg / W_reg pass registers and the result shift path. Expected values
// are computed here with plain integer arithmetic.
module tb_int4_pe;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic acc_mode, clr, shift, wht, h_neg, coef_hi, f_signed, w_signed, f_vld;
  logic [3:0] f_in, w_in;
  logic [9:0] last_res;
  logic [3:0] f_out, w_out;
  logic f_vld_out, r_vld;
  logic [9:0] r_out;
  logic [7:0] psum_out;

  int checks = 0, failures = 0;

  int4_pe dut (.clk, .rst_n, .acc_mode, .clr, .shift, .wht, .h_neg, .coef_hi,
               .f_in, .f_signed, .f_vld_in(f_vld), .w_in, .w_signed, .last_res,
               .f_out, .f_vld_out, .w_out, .r_out, .r_vld, .psum_out);

  function automatic int sx4(input logic [3:0] v, input logic s);
    return s ? int'(signed'(v)) : int'(v);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int acc;
    int exp_p;
    {acc_mode, clr, shift, wht, h_neg, coef_hi, f_signed, w_signed, f_vld} = '0;
    f_in = 0; w_in = 0; last_res = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // --- INT4 accumulation, 20 random runs of 1..40 MACs
    for (int run = 0; run < 20; run++) begin
      acc_mode = 1; f_signed = 1; w_signed = 1;
      clr = 1; @(posedge clk); #1 clr = 0;
      acc = 0;
      for (int k = 0; k < 1 + run * 2; k++) begin
        f_in = 4'($urandom); w_in = 4'($urandom); f_vld = 1;
        acc += sx4(f_in, 1) * sx4(w_in, 1);
        @(posedge clk); #1;
        check(f_out == f_in && w_out == w_in && f_vld_out, "pass registers");
      end
      f_vld = 0;
      @(posedge clk); #1;
      check(psum_out == 8'(acc), $sformatf("psum run %0d: %0d vs %0d", run, psum_out, 8'(acc)));
      check(r_out[7:0] == 8'(acc), "R_reg holds psum");
    end

    // --- product mode, every signedness combination
    acc_mode = 0;
    for (int t = 0; t < 400; t++) begin
      f_in = 4'($urandom); w_in = 4'($urandom);
      f_signed = 1'($urandom); w_signed = 1'($urandom);
      f_vld = 1;
      exp_p = sx4(f_in, f_signed) * sx4(w_in, w_signed);
      @(posedge clk); #1;
      check(r_out == 10'(exp_p) && r_vld, $sformatf("product %0d", exp_p));
    end

    // --- Hadamard multiplexer: feature replaced by +-1
    wht = 1;
    for (int t = 0; t < 100; t++) begin
      f_in = 4'($urandom); w_in = 4'($urandom);
      f_signed = 1; w_signed = 1; coef_hi = 0;
      h_neg = 1'($urandom);
      exp_p = (h_neg ? -1 : 1) * sx4(w_in, 1);
      @(posedge clk); #1;
      check(r_out == 10'(exp_p), "wht coefficient");
    end
    // upper nibble of an INT8 coefficient: 0000 for +1, 1111 for -1
    coef_hi = 1; f_signed = 1; w_signed = 0;
    h_neg = 0; w_in = 4'd9; @(posedge clk); #1;
    check(r_out == 10'd0, "wht upper nibble +1");
    h_neg = 1; @(posedge clk); #1;
    check(r_out == 10'(-9), "wht upper nibble -1");
    wht = 0; coef_hi = 0; f_vld = 0;

    // --- result shift
    shift = 1; last_res = 10'h2A5; @(posedge clk); #1;
    check(r_out == 10'h2A5, "shift loads last result");
    shift = 0; acc_mode = 1; @(posedge clk); #1;
    check(r_out == 10'h2A5, "R_reg holds without valid");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
