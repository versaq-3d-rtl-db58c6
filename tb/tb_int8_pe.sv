// tb_int8_pe: self-checking test of the INT8 PE in its three modes.
// INT8: random signed MAC sequences against an integer reference. INT4: the
// PE as a 2 x 2 systolic block with skewed inputs, results modulo 2^8.
// BF16: unsigned 8 x 8 products and 24-bit adds, one cycle latency. Also the
// Hadamard mode in INT8 and the result shift chain.
module tb_int8_pe;
  import versaq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  prec_mode_e mode;
  logic wht, clr, shift, bf_op_mul;
  logic [7:0] f_in, w_in, f_out, w_out, bf_a, bf_b;
  logic [1:0] f_vld_in, f_vld_out;
  logic [31:0] res_in, res_out;
  logic signed [23:0] bf_x, bf_y, bf_res;

  int checks = 0, failures = 0;

  int8_pe dut (.*);

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

  task automatic idle();
    f_in = 0; w_in = 0; f_vld_in = 0;
  endtask

  initial begin
    int acc;
    int a4 [2][8];
    int b4 [8][2];
    int c4 [2][2];
    int kl;
    mode = MODE_INT8; {wht, clr, shift, bf_op_mul} = '0;
    idle(); res_in = 0; bf_a = 0; bf_b = 0; bf_x = 0; bf_y = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // ---------------- INT8 MAC
    for (int run = 0; run < 10; run++) begin
      mode = MODE_INT8;
      clr = 1; @(posedge clk); #1 clr = 0;
      acc = 0;
      for (int k = 0; k < 5 + run * 7; k++) begin
        f_in = 8'($urandom); w_in = 8'($urandom); f_vld_in = 2'b01;
        acc += int'(signed'(f_in)) * int'(signed'(w_in));
        @(posedge clk); #1;
        check(f_out == f_in && w_out == w_in && f_vld_out[0], "INT8 pass registers");
      end
      idle();
      repeat (2) @(posedge clk); #1;
      check(res_out == 32'(acc), $sformatf("INT8 acc %0d vs %0d", int'(signed'(res_out)), acc));
    end

    // ---------------- Hadamard in INT8: feature bit 0 = sign, data on weights
    mode = MODE_INT8; wht = 1;
    clr = 1; @(posedge clk); #1 clr = 0;
    acc = 0;
    for (int k = 0; k < 16; k++) begin
      f_in = {7'($urandom), 1'($urandom)}; w_in = 8'($urandom); f_vld_in = 2'b01;
      acc += (f_in[0] ? -1 : 1) * int'(signed'(w_in));
      @(posedge clk); #1;
    end
    idle();
    repeat (2) @(posedge clk); #1;
    check(res_out == 32'(acc), "INT8 WHT");
    wht = 0;

    // ---------------- INT4 2x2 systolic block
    for (int run = 0; run < 10; run++) begin
      mode = MODE_INT4;
      kl = 8;
      for (int i = 0; i < 2; i++) for (int k = 0; k < kl; k++) a4[i][k] = $urandom_range(0, 15) - 8;
      for (int k = 0; k < kl; k++) for (int j = 0; j < 2; j++) b4[k][j] = $urandom_range(0, 15) - 8;
      clr = 1; @(posedge clk); #1 clr = 0;
      // row 1 / column 1 lag by one cycle (skew)
      for (int t = 0; t <= kl; t++) begin
        f_in = 0; w_in = 0; f_vld_in = 0;
        if (t < kl)  begin f_in[3:0] = 4'(a4[0][t]);   f_vld_in[0] = 1; w_in[3:0] = 4'(b4[t][0]);   end
        if (t >= 1)  begin f_in[7:4] = 4'(a4[1][t-1]); f_vld_in[1] = 1; w_in[7:4] = 4'(b4[t-1][1]); end
        @(posedge clk); #1;
      end
      idle();
      repeat (3) @(posedge clk); #1;
      for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++) begin
        c4[i][j] = 0;
        for (int k = 0; k < kl; k++) c4[i][j] += a4[i][k] * b4[k][j];
      end
      check(res_out == {8'(c4[1][1]), 8'(c4[1][0]), 8'(c4[0][1]), 8'(c4[0][0])},
            $sformatf("INT4 block %h", res_out));
    end

    // ---------------- result shift chain (INT4 and INT8)
    mode = MODE_INT4; shift = 1; res_in = 32'hA1B2C3D4; @(posedge clk); #1;
    check(res_out == 32'hA1B2C3D4, "INT4 shift");
    mode = MODE_INT8; res_in = 32'h12345678; @(posedge clk); #1;
    check(res_out == 32'h12345678, "INT8 shift");
    shift = 0;

    // ---------------- BF16 helper: MUL and ADD
    mode = MODE_BF16;
    for (int t = 0; t < 300; t++) begin
      bf_op_mul = 1; bf_a = 8'($urandom); bf_b = 8'($urandom);
      acc = int'(bf_a) * int'(bf_b);
      @(posedge clk); #1;
      check(bf_res == 24'(acc), "BF16 MUL");
      bf_op_mul = 0; bf_x = 24'($urandom); bf_y = 24'($urandom);
      acc = int'(bf_x) + int'(bf_y);
      @(posedge clk); #1;
      check(bf_res == 24'(acc), "BF16 ADD");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
