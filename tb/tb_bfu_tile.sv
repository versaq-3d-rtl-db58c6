// tb_bfu_tile: self-checking test of one BFU tile at its default size
// (64 BFUs, 4 x 64 INT8 PEs, 16-entry BFU buffer).
// BF16: the buffer is filled with random BF16 words, then back-to-back
// commands (II = 1) read two words, compute all 64 lanes and write the result
// back or only forward it. Every lane is compared with a reference model and
// the result must appear 5 cycles after issue (1 buffer read + 4 BFU
// stages). Written-back words are read again by later commands, which also
// exercises read-after-write through the buffer.
// INT8: a 4 x 64 output-stationary GEMM with skewed inputs, then the
// results are drained through the vertical shift chain row by row.
module tb_bfu_tile;
  import versaq_pkg::*;
  localparam int NBFU = 64, ROWS = 4, DEPTH = 16, COLS = 64, K = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  prec_mode_e mode;
  logic wht, clr, shift;
  logic [7:0]  f_in [ROWS], f_out [ROWS];
  logic [1:0]  f_vld_in [ROWS], f_vld_out [ROWS];
  logic [7:0]  w_in [COLS], w_out [COLS];
  logic [31:0] res_in [COLS], res_out [COLS];
  logic bf_issue, wb, fill_we, res_vld;
  bf_op_e bf_op;
  logic [3:0] ra_a, ra_b, wa, fill_wa;
  logic [NBFU*16-1:0] fill_wd, res_word;

  int checks = 0, failures = 0;

  bfu_tile dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
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
    v[14:7] = 8'($urandom_range(110, 140));
    return v;
  endfunction

  // model of the buffer contents
  logic [15:0] shadow [DEPTH][NBFU];
  logic [NBFU*16-1:0] exp_q [$];
  int lat_q [$];
  int cyc = 0, n_res = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && res_vld) begin
      if (exp_q.size() == 0) check(0, "unexpected result");
      else begin
        logic [NBFU*16-1:0] e;
        int t0;
        e = exp_q.pop_front(); t0 = lat_q.pop_front();
        for (int l = 0; l < NBFU; l++)
          check(res_word[l*16 +: 16] == e[l*16 +: 16],
                $sformatf("lane %0d got %h expected %h", l, res_word[l*16 +: 16], e[l*16 +: 16]));
        check(cyc - t0 == 5, $sformatf("latency %0d", cyc - t0));
        n_res++;
      end
    end
  end

  // Issue one command; the model applies the write-back when it lands
  // (5 cycles later), so reads of that word issued earlier see the old value.
  logic [15:0] pend_w [$][NBFU];
  task automatic issue(input bf_op_e op, input int a, input int b, input bit w, input int addr);
    logic [NBFU*16-1:0] e;
    for (int l = 0; l < NBFU; l++) e[l*16 +: 16] = ref_op(op, shadow[a][l], shadow[b][l]);
    exp_q.push_back(e); lat_q.push_back(cyc);
    bf_issue = 1; bf_op = op; ra_a = 4'(a); ra_b = 4'(b); wb = w; wa = 4'(addr);
    @(posedge clk); #1;
    bf_issue = 0; wb = 0;
    if (w) fork
      begin
        repeat (4) @(posedge clk);
        for (int l = 0; l < NBFU; l++) shadow[addr][l] = e[l*16 +: 16];
      end
    join_none
  endtask

  initial begin
    int fv [ROWS][K];
    int wv [COLS][K];
    mode = MODE_BF16; {wht, clr, shift} = '0;
    for (int r = 0; r < ROWS; r++) begin f_in[r] = 0; f_vld_in[r] = 0; end
    for (int c = 0; c < COLS; c++) begin w_in[c] = 0; res_in[c] = 0; end
    bf_issue = 0; bf_op = OP_FPADD; {ra_a, ra_b, wa, fill_wa} = '0; wb = 0;
    fill_we = 0; fill_wd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // fill the BFU buffer
    for (int a = 0; a < DEPTH; a++) begin
      fill_we = 1; fill_wa = 4'(a);
      for (int l = 0; l < NBFU; l++) begin
        shadow[a][l] = rnd_bf16();
        fill_wd[l*16 +: 16] = shadow[a][l];
      end
      @(posedge clk); #1;
    end
    fill_we = 0;

    // independent back-to-back commands (write-backs to 8..15, reads 0..7)
    for (int t = 0; t < 40; t++)
      issue(bf_op_e'($urandom_range(0, 2)), $urandom_range(0, 7), $urandom_range(0, 7),
            $urandom_range(0, 1), $urandom_range(8, 15));
    repeat (8) @(posedge clk); #1;
    // dependent commands: each reads what earlier ones wrote back
    for (int t = 0; t < 40; t++) begin
      issue(bf_op_e'($urandom_range(0, 2)), $urandom_range(0, 15), $urandom_range(0, 15),
            1, $urandom_range(8, 15));
      repeat ($urandom_range(0, 6)) @(posedge clk);
      #1;
    end
    repeat (8) @(posedge clk); #1;
    check(n_res == 80 && exp_q.size() == 0, $sformatf("all BF16 results returned (%0d)", n_res));

    // ---------------- INT8 output-stationary GEMM, 4 x 64 outputs
    mode = MODE_INT8;
    clr = 1; @(posedge clk); #1 clr = 0;
    for (int k = 0; k < K; k++) begin
      for (int r = 0; r < ROWS; r++) fv[r][k] = $urandom_range(0, 255) - 128;
      for (int c = 0; c < COLS; c++) wv[c][k] = $urandom_range(0, 255) - 128;
    end
    // row r is delayed by r, column c by c: PE (r,c) sees operand k at k+r+c
    for (int t = 0; t < K + ROWS + COLS; t++) begin
      for (int r = 0; r < ROWS; r++) begin
        f_in[r]     = (t - r >= 0 && t - r < K) ? 8'(fv[r][t-r]) : 8'd0;
        f_vld_in[r] = (t - r >= 0 && t - r < K) ? 2'b01 : 2'b00;
      end
      for (int c = 0; c < COLS; c++)
        w_in[c] = (t - c >= 0 && t - c < K) ? 8'(wv[c][t-c]) : 8'd0;
      @(posedge clk); #1;
    end
    // drain: bottom row first
    for (int r = ROWS - 1; r >= 0; r--) begin
      for (int c = 0; c < COLS; c++) begin
        int acc;
        acc = 0;
        for (int k = 0; k < K; k++) acc += fv[r][k] * wv[c][k];
        check(res_out[c] == 32'(acc), $sformatf("GEMM out (%0d,%0d) %0d expected %0d", r, c,
                                                 $signed(res_out[c]), acc));
      end
      shift = 1; @(posedge clk); #1 shift = 0;
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
