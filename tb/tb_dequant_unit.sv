// tb_dequant_unit: self-checking test of the dequantization unit (128 lanes).
// Each lane's BF16 output is compared with x * scale computed in real
// arithmetic (tolerance: two truncations to 8 significant bits), exact
// values are checked for simple cases, and the per-token local max must
// equal the largest |output| over the enabled lanes of all beats of that
// token. Also checks the one-cycle latency and max_clr.
module tb_dequant_unit;
  localparam int L = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_vld, max_clr, out_vld;
  logic [L-1:0] in_mask;
  logic [6:0] in_tok, rd_tok;
  logic [31:0] in_data [L];
  logic [15:0] scale [L], out_data [L], max_result;

  int checks = 0, failures = 0;
  logic [14:0] exp_max [128];

  dequant_unit dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic real bf2r(input logic [15:0] b);
    real m;
    int  e;
    if (b[14:7] == 0) return 0.0;
    m = (128.0 + real'(b[6:0])) / 128.0;
    e = int'(b[14:7]) - 127;
    while (e > 0) begin m = m * 2.0; e--; end
    while (e < 0) begin m = m / 2.0; e++; end
    return b[15] ? -m : m;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_vld = 0; max_clr = 0; in_mask = '0; in_tok = 0; rd_tok = 0;
    for (int l = 0; l < L; l++) begin in_data[l] = 0; scale[l] = 0; end
    for (int t = 0; t < 128; t++) exp_max[t] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // exact: 3 * 0.5 = 1.5, -256 * 2 = -512, 0 * x = 0
    @(negedge clk);
    in_vld = 1; in_mask = '1; in_tok = 0;
    for (int l = 0; l < L; l++) begin in_data[l] = 0; scale[l] = 16'h3F80; end
    in_data[0] = 3;     scale[0] = 16'h3F00;
    in_data[1] = -256;  scale[1] = 16'h4000;
    @(negedge clk);
    in_vld = 0;
    check(out_vld, "latency one cycle");
    check(out_data[0] == 16'h3FC0, "3 * 0.5");
    check(out_data[1] == 16'hC400, "-256 * 2");
    check(out_data[2] == 16'h0000, "zero");
    @(negedge clk);
    max_clr = 1; @(negedge clk); max_clr = 0;

    // random beats for 16 tokens, several beats (column tiles) each
    for (int b = 0; b < 64; b++) begin
      real ref_v, got;
      logic [L-1:0] mk;
      @(negedge clk);
      in_vld = 1; in_tok = 7'(b % 16);
      mk = {$urandom, $urandom, $urandom, $urandom};
      if (b % 5 == 0) mk = {64'd0, 64'hFFFF_FFFF_FFFF_FFFF};   // half-width (INT8 drain)
      in_mask = mk;
      for (int l = 0; l < L; l++) begin
        in_data[l] = $urandom_range(0, 200000) - 100000;
        scale[l]   = {1'b0, 8'($urandom_range(110, 130)), 7'($urandom)};
      end
      @(negedge clk);
      in_vld = 0;
      for (int l = 0; l < L; l++) begin
        if (mk[l]) begin
          ref_v = real'(signed'(in_data[l])) * bf2r(scale[l]);
          got   = bf2r(out_data[l]);
          // truncation toward zero: |got| <= |ref|, relative error < 2^-6
          if (ref_v < 0.0) begin ref_v = -ref_v; got = -got; end
          check((ref_v == 0.0 && got == 0.0) ||
                (got <= ref_v && (ref_v - got) / ref_v < 0.016),
                $sformatf("lane %0d: %f vs %f", l, got, ref_v));
          if (out_data[l][14:0] > exp_max[b % 16]) exp_max[b % 16] = out_data[l][14:0];
        end else
          check(out_data[l] == 16'h0000, "masked lane");
      end
    end
    @(negedge clk);
    for (int t = 0; t < 16; t++) begin
      rd_tok = 7'(t); #1;
      check(max_result == {1'b0, exp_max[t]}, $sformatf("token %0d max %h vs %h", t, max_result, exp_max[t]));
    end
    @(negedge clk);
    max_clr = 1; @(negedge clk); max_clr = 0;
    rd_tok = 3; #1;
    check(max_result == 16'h0000, "max_clr");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
