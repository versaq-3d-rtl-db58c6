// tb_bfu: self-checking test of the Bitwidth Flexible Unit.
// BF16 mode: back-to-back random fpadd / fpmul / fptmp operations (II = 1)
// against a reference model written here from the number conventions
// (flush-to-zero, truncation, saturation to infinity); each result must
// appear exactly 4 cycles after its operands. A few hand-computed values
// anchor the model (1.5 + 2.25 = 3.75, 3.0 * -0.5 = -1.5, rsqrt seed of 4).
// INT8 mode: the BFU as one row of four systolic PEs.
module tb_bfu;
  import versaq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  prec_mode_e mode;
  logic wht, clr, shift;
  logic [7:0] f_in, f_out;
  logic [1:0] f_vld_in, f_vld_out;
  logic [7:0] w_in [4], w_out [4];
  logic [31:0] res_in [4], res_out [4];
  logic bf_vld, bf_out_vld;
  bf_op_e bf_op;
  logic [15:0] bf_a, bf_b, bf_out;

  int checks = 0, failures = 0;

  bfu dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] ref_mul(input logic [15:0] a, input logic [15:0] b);
    logic s; int e0, ec, p;
    s = a[15] ^ b[15];
    if (a[14:7] == 0 || b[14:7] == 0) return {s, 15'd0};
    e0 = int'(a[14:7]) + int'(b[14:7]) - 127;
    if (e0 <= 0) return {s, 15'd0};
    ec = (e0 > 255) ? 255 : e0;
    p  = int'({1'b1, a[6:0]}) * int'({1'b1, b[6:0]});
    if (p >= 32768) begin
      if (ec + 1 >= 255) return {s, 8'hFF, 7'd0};
      return {s, 8'(ec + 1), 7'(p >> 8)};
    end
    if (ec == 255) return {s, 8'hFF, 7'd0};
    return {s, 8'(ec), 7'(p >> 7)};
  endfunction

  function automatic logic [15:0] ref_add(input logic [15:0] a, input logic [15:0] b);
    int ma, mb, d, ml, ms, el, dd, al, sum, mag, lead, e;
    logic sl, ss, neg, swap;
    ma = (a[14:7] == 0) ? 0 : 128 + int'(a[6:0]);
    mb = (b[14:7] == 0) ? 0 : 128 + int'(b[6:0]);
    d  = int'(a[14:7]) - int'(b[14:7]);
    swap = (d < 0) || (d == 0 && mb > ma);
    ml = swap ? mb : ma;  sl = swap ? b[15] : a[15];  el = swap ? int'(b[14:7]) : int'(a[14:7]);
    ms = swap ? ma : mb;  ss = swap ? a[15] : b[15];
    dd = (d < 0) ? -d : d;
    if (dd > 15) dd = 15;
    al  = (dd <= 7) ? (ms << (7 - dd)) : 0;
    sum = (sl ? -ml : ml) * 128 + (ss ? -al : al);
    if (sum == 0) return 16'h0000;
    neg = sum < 0;
    mag = neg ? -sum : sum;
    lead = 0;
    for (int i = 0; i < 24; i++) if ((mag >> i) & 1) lead = i;
    e = el + lead - 14;
    if (e >= 255) return {neg, 8'hFF, 7'd0};
    if (e <= 0)   return {neg, 15'd0};
    return {neg, 8'(e), 7'((mag << (23 - lead)) >> 16)};
  endfunction

  function automatic logic [15:0] ref_op(input bf_op_e op, input logic [15:0] a, input logic [15:0] b);
    case (op)
      OP_FPADD: return ref_add(a, b);
      OP_FPMUL: return ref_mul(a, b);
      default:  return ref_mul(16'(RSQRT_MAGIC - (a >> 1)), b);
    endcase
  endfunction

  function automatic logic [15:0] rnd_bf16();
    logic [15:0] v;
    v = 16'($urandom);
    v[14:7] = 8'($urandom_range(100, 150));   // keep most results normal
    if ($urandom_range(0, 15) == 0) v[14:7] = 8'($urandom);  // sometimes anything
    return v;
  endfunction

  logic [15:0] exp_q [$];
  int          lat_q [$];
  int          cyc = 0;
  int          n_out = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // Output monitor: compares in issue order and checks the 4-cycle latency.
  always @(posedge clk) begin
    if (rst_n && bf_out_vld) begin
      if (exp_q.size() == 0) check(0, "unexpected output");
      else begin
        logic [15:0] e;
        int t0;
        e  = exp_q.pop_front();
        t0 = lat_q.pop_front();
        check(bf_out == e, $sformatf("BF16 result %h expected %h", bf_out, e));
        check(cyc - t0 == 4, $sformatf("latency %0d", cyc - t0));
        n_out++;
      end
    end
  end

  task automatic issue(input bf_op_e op, input logic [15:0] a, input logic [15:0] b);
    bf_vld = 1; bf_op = op; bf_a = a; bf_b = b;
    exp_q.push_back(ref_op(op, a, b));
    lat_q.push_back(cyc);
    @(posedge clk); #1;
    bf_vld = 0;
  endtask

  initial begin
    int acc [4];
    int fv [40];
    int wv [4][40];
    mode = MODE_BF16; {wht, clr, shift} = '0;
    f_in = 0; f_vld_in = 0;
    for (int k = 0; k < 4; k++) begin w_in[k] = 0; res_in[k] = 0; end
    bf_vld = 0; bf_op = OP_FPADD; bf_a = 0; bf_b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // anchors against hand-computed values
    check(ref_add(16'h3FC0, 16'h4010) == 16'h4070, "model: 1.5 + 2.25 = 3.75");
    check(ref_mul(16'h4040, 16'hBF00) == 16'hBFC0, "model: 3 * -0.5 = -1.5");
    check(ref_add(16'h4040, 16'hC040) == 16'h0000, "model: 3 - 3 = 0");
    // seed for 4.0 (0x4080): 0x5F37 - 0x2040 = 0x3EF7 ~ 0.482 (1/sqrt(4) = 0.5)
    check(ref_op(OP_FPTMP, 16'h4080, BF16_ONE) == 16'h3EF7, "model: rsqrt seed of 4");

    issue(OP_FPADD, 16'h3FC0, 16'h4010);
    issue(OP_FPMUL, 16'h4040, 16'hBF00);
    issue(OP_FPTMP, 16'h4080, BF16_ONE);
    // back-to-back random operations
    for (int t = 0; t < 3000; t++) begin
      bf_op_e op;
      op = bf_op_e'($urandom_range(0, 2));
      issue(op, rnd_bf16(), rnd_bf16());
    end
    repeat (8) @(posedge clk); #1;
    check(n_out == 3003 && exp_q.size() == 0, $sformatf("all results returned (%0d)", n_out));

    // ---------------- INT8 systolic row of four PEs
    mode = MODE_INT8;
    clr = 1; @(posedge clk); #1 clr = 0;
    for (int k = 0; k < 40; k++) begin
      fv[k] = $urandom_range(0, 255) - 128;
      for (int c = 0; c < 4; c++) wv[c][k] = $urandom_range(0, 255) - 128;
    end
    for (int c = 0; c < 4; c++) begin
      acc[c] = 0;
      for (int k = 0; k < 40; k++) acc[c] += fv[k] * wv[c][k];
    end
    // column c sees the feature c cycles late, so its weights are skewed by c
    for (int t = 0; t < 44; t++) begin
      f_in = (t < 40) ? 8'(fv[t]) : 8'd0;
      f_vld_in = (t < 40) ? 2'b01 : 2'b00;
      for (int c = 0; c < 4; c++)
        w_in[c] = (t - c >= 0 && t - c < 40) ? 8'(wv[c][t-c]) : 8'd0;
      @(posedge clk); #1;
    end
    f_vld_in = 0;
    repeat (4) @(posedge clk); #1;
    for (int c = 0; c < 4; c++)
      check(res_out[c] == 32'(acc[c]), $sformatf("systolic column %0d", c));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
