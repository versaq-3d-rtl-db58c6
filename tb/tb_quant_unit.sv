// tb_quant_unit: self-checking test of the quantization unit (128 lanes).
// For random tokens in INT4 and INT8 the quantized value must be within the
// approximation error of round(x * qmax / max) clamped to [-qmax, qmax]
// (the inverse comes from a 7-bit LUT and two truncating BF16 multiplies:
// at most 3 * 2^-7 relative, i.e. 1 LSB for INT4 and 3 for INT8), never
// outside the clamp range, and the token scale must be max / qmax. Exact
// cases (0, +-max) and the two-cycle latency are checked too.
module tb_quant_unit;
  localparam int L = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_vld, int4, out_vld;
  logic [15:0] max_in, scale_out;
  logic [15:0] in_data [L];
  logic signed [7:0] out_q [L];

  int checks = 0, failures = 0;

  quant_unit dut (.*);

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
    in_vld = 0; int4 = 0; max_in = 0;
    for (int l = 0; l < L; l++) in_data[l] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    for (int tok = 0; tok < 200; tok++) begin
      logic [14:0] mx;
      int qmax, tol;
      real m, ideal;
      int r;
      @(negedge clk);
      int4 = tok[0];
      qmax = int4 ? 7 : 127;
      tol  = int4 ? 1 : 3;
      mx = 0;
      for (int l = 0; l < L; l++) begin
        in_data[l] = {1'($urandom), 8'($urandom_range(118, 134)), 7'($urandom)};
        if (l == 5) in_data[l] = 16'h0000;
        if (in_data[l][14:0] > mx) mx = in_data[l][14:0];
      end
      max_in = {1'b0, mx};
      in_vld = 1;
      @(negedge clk);
      in_vld = 0;
      check(!out_vld, "not yet valid after one cycle");
      @(negedge clk);
      check(out_vld, "valid after two cycles");
      m = bf2r(max_in);
      for (int l = 0; l < L; l++) begin
        ideal = bf2r(in_data[l]) * qmax / m;
        r = (ideal >= 0.0) ? int'($floor(ideal + 0.5)) : -int'($floor(-ideal + 0.5));
        if (r > qmax) r = qmax;
        if (r < -qmax) r = -qmax;
        check(int'(out_q[l]) <= qmax && int'(out_q[l]) >= -qmax, "within clamp range");
        check(int'(out_q[l]) - r <= tol && r - int'(out_q[l]) <= tol,
              $sformatf("tok %0d lane %0d: %0d vs %0d", tok, l, out_q[l], r));
        if (in_data[l][14:0] == 15'd0) check(out_q[l] == 0, "zero stays zero");
      end
      check(bf2r(scale_out) <= m / qmax * 1.0001 && bf2r(scale_out) > m / qmax * 0.98, "token scale");
    end

    // back-to-back tokens (II = 1): each result and its scale must belong to
    // the token issued two cycles earlier. Token t has all lanes equal to
    // -max_t, so its lanes quantize to about -7 and its scale is max_t / 7.
    begin
      logic [15:0] mxs [$];
      @(negedge clk);
      int4 = 1;
      for (int t = 0; t < 12; t++) begin
        if (t < 10) begin
          max_in = {1'b0, 8'(120 + t), 7'($urandom)};
          for (int l = 0; l < L; l++) in_data[l] = {1'b1, max_in[14:0]};
          mxs.push_back(max_in);
          in_vld = 1;
        end else in_vld = 0;
        @(negedge clk);
        if (t >= 1 && t <= 10) begin
          real m;
          m = bf2r(mxs.pop_front());
          check(out_vld, "back-to-back valid");
          check(bf2r(scale_out) <= m / 7.0 * 1.0001 && bf2r(scale_out) > m / 7.0 * 0.98,
                $sformatf("back-to-back scale of token %0d", t - 1));
          for (int l = 0; l < L; l++)
            check(out_q[l] == -8'sd7 || out_q[l] == -8'sd6, "back-to-back lane value");
        end
      end
      in_vld = 0;
    end

    // values beyond the max are clamped: max = 1.0, inputs up to 8.0
    @(negedge clk);
    int4 = 1; max_in = 16'h3F80;
    for (int l = 0; l < L; l++) in_data[l] = (l % 2) ? 16'h4100 : 16'hC100;   // +-8.0
    in_vld = 1; @(negedge clk); in_vld = 0; @(negedge clk);
    for (int l = 0; l < L; l++) check(out_q[l] == ((l % 2) ? 8'sd7 : -8'sd7), "clamp INT4");
    int4 = 0;
    in_vld = 1; @(negedge clk); in_vld = 0; @(negedge clk);
    for (int l = 0; l < L; l++) check(out_q[l] == ((l % 2) ? 8'sd127 : -8'sd127), "clamp INT8");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
