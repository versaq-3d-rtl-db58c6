// tb_versaq3d_top: end-to-end test of the whole accelerator, run with 4 tiles
// of 16 BFUs (a 16 x 16 INT8 / 32 x 32 INT4 array) and full-size buffers so
// that it simulates in seconds; every other parameter is at its default.
// One layer's worth of the flow is run through the command port:
//   1. INT8 GEMM (weights double-buffered: filled into the idle bank, then
//      swapped in), results dequantized into the output buffer;
//   2. per-token INT8 quantization of those results back into the input
//      buffer with the tracked token maxima;
//   3. INT4 GEMM over the whole INT4 array, whose next weights are loaded into the idle
//      weight bank while it runs, then INT4 quantization;
//   4. a 64-point Hadamard (WHT) pass (as many output rows as the array has);
//   5. BF16 SIMD commands (fpmul with write-back, fptmp and fpadd forwarded
//      to the output buffer) on two tiles, then back to INT8;
//   6. the two-stage attention schedule for a 300-token sequence.
// Every value is compared with arithmetic done here (integer matrix
// products, a BF16 model with truncation / flush-to-zero, real-valued
// quantization with a tolerance for the approximate inverse). Each
// mechanism is counted and must occur at least once: mode switches,
// command back-pressure, weight-bank swaps, weight prefetch during a GEMM,
// INT4 / INT8 / WHT passes, both quantization widths, BF16 write-back and
// forwarding, attention stalls and O-tile writes.
module tb_versaq3d_top;
  import versaq_pkg::*;
  localparam int NT = 4, NB = 16;
  localparam int N = NT * 4, M = NB, LANES = 2 * M;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_vld, cmd_rdy, cmd_done;
  cmd_t cmd;
  logic [15:0] deq_scale [LANES];
  logic q_scale_vld;
  logic [15:0] q_scale;
  logic in_fill_we;
  logic [10:0] in_fill_wa;
  logic [N*8-1:0] in_fill_wd;
  logic w_fill_we;
  logic [10:0] w_fill_wa;
  logic [M*8-1:0] w_fill_wd;
  logic w_swap, w_rd_bank;
  logic [NT-1:0] bf_fill_we;
  logic [3:0] bf_fill_wa;
  logic [NB*16-1:0] bf_fill_wd;
  logic ob_re;
  logic [9:0] ob_ra;
  logic [LANES*16-1:0] ob_rd;
  logic attn_start, attn_busy, attn_done, attn_cmd_vld, attn_cmd_rdy;
  logic [15:0] attn_n, attn_cmd_q, attn_cmd_k, attn_cmd_v, attn_s1_cnt, attn_s2_cnt, attn_ow_cnt;
  logic [1:0] attn_cmd_kind;

  versaq3d_top #(.NTILES(NT), .NBFU(NB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------ reference math
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


  function automatic logic [15:0] ref_i2bf(input int v);   // truncating
    longint mag;
    int lead;
    logic s;
    if (v == 0) return 16'h0000;
    s = v < 0;
    mag = s ? -longint'(v) : longint'(v);
    lead = 0;
    for (int i = 0; i < 33; i++) if ((mag >> i) & 1) lead = i;
    return {s, 8'(127 + lead), 7'((mag << (40 - lead)) >> 33)};
  endfunction

  function automatic real bf2r(input logic [15:0] v);
    real r;
    int e;
    if (v[14:7] == 0) return 0.0;
    r = 1.0 + real'(v[6:0]) / 128.0;
    e = int'(v[14:7]) - 127;
    while (e > 0) begin r = r * 2.0; e--; end
    while (e < 0) begin r = r / 2.0; e++; end
    return v[15] ? -r : r;
  endfunction

  function automatic int hsign(input int k, input int r);
    return ($countones(k & r) % 2) ? -1 : 1;
  endfunction

  // ---------------------------------------------------- mechanism counters
  int n_mode_sw = 0, n_cmd_stall = 0, n_swap = 0, n_prefetch = 0;
  int n_int8 = 0, n_int4 = 0, n_wht = 0, n_q4 = 0, n_q8 = 0;
  int n_wb = 0, n_fwd = 0, n_attn_stall = 0, n_owrite = 0;
  prec_mode_e last_mode = MODE_INT8;

  always @(posedge clk) begin
    if (cmd_vld && !cmd_rdy) n_cmd_stall++;
    if (attn_cmd_vld && !attn_cmd_rdy) n_attn_stall++;
    if (attn_cmd_vld && attn_cmd_rdy && attn_cmd_kind == 2'd3) n_owrite++;
    if (w_fill_we && dut.state != dut.T_IDLE) n_prefetch++;
  end

  // Sends a command; returns as soon as it is accepted (the next one may be
  // queued behind it and is then held by cmd_rdy).
  task automatic send(input cmd_t c);
    prec_mode_e m;
    m = (c.opc == OPC_BF16) ? MODE_BF16 : (c.opc == OPC_GEMM ? c.mode : last_mode);
    if (m != last_mode) n_mode_sw++;
    last_mode = m;
    cmd = c; cmd_vld = 1;
    @(posedge clk);
    while (!cmd_rdy) @(posedge clk);
    #1 cmd_vld = 0;
  endtask

  task automatic wait_idle();
    @(posedge clk);
    while (!cmd_rdy) @(posedge clk);
    #1;
  endtask

  task automatic fill_in(input int addr, input logic [N*8-1:0] d);
    in_fill_we = 1; in_fill_wa = 11'(addr); in_fill_wd = d;
    @(posedge clk); #1 in_fill_we = 0;
  endtask

  task automatic fill_w(input int addr, input logic [M*8-1:0] d);
    w_fill_we = 1; w_fill_wa = 11'(addr); w_fill_wd = d;
    @(posedge clk); #1 w_fill_we = 0;
  endtask

  task automatic swap();
    logic b;
    b = w_rd_bank;
    w_swap = 1; @(posedge clk); #1 w_swap = 0;
    check(w_rd_bank == !b, "weight bank swap");
    n_swap++;
  endtask

  task automatic ob_read(input int addr, output logic [LANES*16-1:0] d);
    ob_re = 1; ob_ra = 10'(addr);
    @(posedge clk); #1 ob_re = 0;
    d = ob_rd;
  endtask

  function automatic cmd_t gemm(input prec_mode_e m, input bit w, input int k, input int ib,
                                input int wbase, input int ob);
    cmd_t c;
    c = '0;
    c.opc = OPC_GEMM; c.mode = m; c.wht = w; c.max_clr = 1; c.k_len = 12'(k);
    c.in_base = 11'(ib); c.w_base = 11'(wbase); c.out_base = 10'(ob);
    return c;
  endfunction

  int A [128][128];
  int B [128][128];
  logic [15:0] obuf [128][LANES];   // dequantized results as read back

  // Checks a finished pass: nr x nc results at output buffer [ob..];
  // int4 results wrap to 8 bits. Keeps the words in obuf for quantization.
  task automatic check_pass(input bit int4, input bit w, input int K, input int ob, input string tag);
    int nr, nc;
    logic [LANES*16-1:0] d;
    nr = int4 ? 2 * N : N; nc = int4 ? 2 * M : M;
    for (int r = 0; r < nr; r++) begin
      ob_read(ob + r, d);
      for (int c = 0; c < nc; c++) begin
        int acc;
        logic [15:0] e;
        acc = 0;
        for (int k = 0; k < K; k++) acc += (w ? hsign(k, r) : A[r][k]) * B[k][c];
        if (int4) acc = int'(signed'(8'(acc)));
        e = ref_mul(ref_i2bf(acc), deq_scale[c]);
        obuf[r][c] = d[c*16 +: 16];
        check(d[c*16 +: 16] == e, $sformatf("%s (%0d,%0d) got %h exp %h (acc %0d)", tag, r, c,
              d[c*16 +: 16], e, acc));
      end
    end
  endtask

  // Checks quantized tokens in the input buffer against obuf and the scales.
  logic [15:0] qscales [$];
  always @(posedge clk) if (q_scale_vld) qscales.push_back(q_scale);

  task automatic check_quant(input bit int4, input int rows, input int ib, input string tag);
    int nl, qmax;
    real tol;
    nl = int4 ? LANES : N; qmax = int4 ? 7 : 127; tol = int4 ? 1.01 : 3.01;
    check(qscales.size() == rows, $sformatf("%s: %0d scales", tag, qscales.size()));
    for (int t = 0; t < rows; t++) begin
      logic [15:0] mx, sc;
      real mr;
      logic [N*8-1:0] word;
      mx = 0;
      for (int l = 0; l < nl; l++) if (obuf[t][l][14:0] > mx[14:0]) mx = {1'b0, obuf[t][l][14:0]};
      mr = bf2r(mx);
      sc = qscales.pop_front();
      check(sc == ref_mul(mx, int4 ? 16'h3E12 : 16'h3C01), $sformatf("%s token %0d scale %h", tag, t, sc));
      word = dut.u_inbuf.mem[0][ib + t];
      for (int l = 0; l < nl; l++) begin
        int q;
        real x;
        q = int4 ? int'(signed'(word[l*4 +: 4])) : int'(signed'(word[l*8 +: 8]));
        x = (mr == 0.0) ? 0.0 : bf2r(obuf[t][l]) * real'(qmax) / mr;
        check(q <= qmax && q >= -qmax && (real'(q) - x <= tol) && (x - real'(q) <= tol),
              $sformatf("%s token %0d lane %0d q=%0d x=%f", tag, t, l, q, x));
      end
    end
  endtask

  initial begin
    cmd_t c;
    logic [N*8-1:0] fw;
    logic [M*8-1:0] ww;
    logic [LANES*16-1:0] d;
    logic [15:0] bsh [2][2][NB];
    int cyc0, nq;

    cmd_vld = 0; cmd = '0;
    in_fill_we = 0; in_fill_wa = 0; in_fill_wd = '0;
    w_fill_we = 0; w_fill_wa = 0; w_fill_wd = '0; w_swap = 0;
    bf_fill_we = '0; bf_fill_wa = 0; bf_fill_wd = '0;
    ob_re = 0; ob_ra = 0;
    attn_start = 0; attn_n = 0; attn_cmd_rdy = 0;
    for (int l = 0; l < LANES; l++) deq_scale[l] = {1'b0, 8'(127 - $urandom_range(0, 3)), 7'd0};
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // ---------------- 1. INT8 GEMM, K = 32
    for (int k = 0; k < 32; k++) begin
      for (int r = 0; r < N; r++) begin A[r][k] = $urandom_range(0, 255) - 128; fw[r*8 +: 8] = 8'(A[r][k]); end
      for (int cc = 0; cc < M; cc++) begin B[k][cc] = $urandom_range(0, 255) - 128; ww[cc*8 +: 8] = 8'(B[k][cc]); end
      fill_in(k, fw);
      fill_w(k, ww);
    end
    swap();
    send(gemm(MODE_INT8, 0, 32, 0, 0, 0));
    n_int8++;
    // ---------------- 2. INT8 quantization of all tokens, queued behind it
    c = '0; c.opc = OPC_QUANT; c.out_base = 0; c.in_base = 11'd512; c.rows = 8'(N); c.q_int4 = 0;
    send(c);
    n_q8++;
    wait_idle();
    check_pass(0, 0, 32, 0, "INT8");
    check_quant(0, N, 512, "Q8");

    // ---------------- 3. INT4 GEMM, K = 40; next weights prefetched
    for (int k = 0; k < 40; k++) begin
      for (int r = 0; r < N; r++) begin
        A[2*r][k] = $urandom_range(0, 15) - 8; A[2*r+1][k] = $urandom_range(0, 15) - 8;
        fw[r*8 +: 8] = {4'(A[2*r+1][k]), 4'(A[2*r][k])};
      end
      for (int cc = 0; cc < M; cc++) begin
        B[k][2*cc] = $urandom_range(0, 15) - 8; B[k][2*cc+1] = $urandom_range(0, 15) - 8;
        ww[cc*8 +: 8] = {4'(B[k][2*cc+1]), 4'(B[k][2*cc])};
      end
      fill_in(100 + k, fw);
      fill_w(200 + k, ww);
    end
    swap();
    send(gemm(MODE_INT4, 0, 40, 100, 200, 256));
    n_int4++;
    // while it runs: WHT data (X, INT8) into the idle bank
    for (int k = 0; k < 64; k++) begin
      for (int cc = 0; cc < M; cc++) ww[cc*8 +: 8] = 8'($urandom_range(0, 255) - 128);
      fill_w(k, ww);
    end
    c = '0; c.opc = OPC_QUANT; c.out_base = 10'd256; c.in_base = 11'd1024; c.rows = 8'(2 * N); c.q_int4 = 1;
    send(c);
    n_q4++;
    wait_idle();
    check_pass(1, 0, 40, 256, "INT4");
    check_quant(1, 2 * N, 1024, "Q4");

    // ---------------- 4. 64-point WHT on the prefetched data
    swap();
    for (int k = 0; k < 64; k++) begin
      ww = dut.u_wbuf.bank1[k];
      if (w_rd_bank == 0) ww = dut.u_wbuf.bank0[k];
      for (int cc = 0; cc < M; cc++) B[k][cc] = int'(signed'(ww[cc*8 +: 8]));
    end
    send(gemm(MODE_INT8, 1, 64, 0, 0, 512));
    n_wht++;
    wait_idle();
    check_pass(0, 1, 64, 512, "WHT");

    // ---------------- 5. BF16 SIMD on tiles 0 and 3
    for (int t = 0; t < 2; t++)
      for (int a = 0; a < 2; a++) begin
        bf_fill_we = '0; bf_fill_we[t == 0 ? 0 : 3] = 1; bf_fill_wa = 4'(a);
        for (int l = 0; l < NB; l++) begin
          bsh[t][a][l] = {1'($urandom), 8'($urandom_range(118, 136)), 7'($urandom)};
          bf_fill_wd[l*16 +: 16] = bsh[t][a][l];
        end
        @(posedge clk); #1;
      end
    bf_fill_we = '0;
    c = '0; c.opc = OPC_BF16; c.bf_op = OP_FPMUL; c.tiles = 16'h0009; c.ra = 0; c.rb = 1;
    c.wb = 1; c.wa = 4'd2;
    send(c); n_wb++;
    c = '0; c.opc = OPC_BF16; c.bf_op = OP_FPTMP; c.tiles = 16'h0008; c.ra = 2; c.rb = 1;
    c.fwd = 1; c.fwd_tile = 4'd3; c.fwd_half = 1; c.out_base = 10'd900;
    send(c); n_fwd++;
    c = '0; c.opc = OPC_BF16; c.bf_op = OP_FPADD; c.tiles = 16'h0001; c.ra = 0; c.rb = 2;
    c.fwd = 1; c.fwd_tile = 4'd0; c.fwd_half = 0; c.out_base = 10'd900;
    send(c); n_fwd++;
    wait_idle();
    ob_read(900, d);
    for (int l = 0; l < NB; l++) begin
      logic [15:0] p0, p1;
      p0 = ref_mul(bsh[0][0][l], bsh[0][1][l]);
      p1 = ref_mul(bsh[1][0][l], bsh[1][1][l]);
      check(d[l*16 +: 16] == ref_add(bsh[0][0][l], p0), $sformatf("BF16 fpadd lane %0d", l));
      check(d[(NB+l)*16 +: 16] == ref_op(OP_FPTMP, p1, bsh[1][1][l]), $sformatf("BF16 fptmp lane %0d", l));
    end

    // ---------------- back to INT8: short GEMM with the current weights
    for (int k = 0; k < 5; k++) begin
      for (int r = 0; r < N; r++) begin A[r][k] = $urandom_range(0, 255) - 128; fw[r*8 +: 8] = 8'(A[r][k]); end
      fill_in(1500 + k, fw);
    end
    send(gemm(MODE_INT8, 0, 5, 1500, 0, 600));
    n_int8++;
    wait_idle();
    check_pass(0, 0, 5, 600, "INT8 after BF16");

    // ---------------- 6. attention schedule, N = 300 tokens
    attn_n = 16'd300; attn_start = 1;
    @(posedge clk); #1 attn_start = 0;
    cyc0 = 0;
    while (attn_busy && cyc0 < 20000) begin
      attn_cmd_rdy = ($urandom_range(0, 2) != 0);
      @(posedge clk); #1;
      cyc0++;
    end
    attn_cmd_rdy = 0;
    nq = (300 + 63) / 64;
    check(attn_ow_cnt == 16'(nq), "attention: one O write per Q tile");
    check(attn_s1_cnt == 16'(nq * nq) && attn_s2_cnt == 16'(nq * nq), "attention: K-tile passes");

    // ---------------- mechanisms
    check(n_mode_sw > 0,    $sformatf("mode switches %0d", n_mode_sw));
    check(n_cmd_stall > 0,  $sformatf("command back-pressure cycles %0d", n_cmd_stall));
    check(n_swap > 0,       $sformatf("weight bank swaps %0d", n_swap));
    check(n_prefetch > 0,   $sformatf("weight prefetch cycles during compute %0d", n_prefetch));
    check(n_int8 > 0 && n_int4 > 0 && n_wht > 0, "INT8 / INT4 / WHT passes");
    check(n_q4 > 0 && n_q8 > 0, "INT4 and INT8 quantization");
    check(n_wb > 0 && n_fwd > 0, "BF16 write-back and forwarding");
    check(n_attn_stall > 0, $sformatf("attention stalls %0d", n_attn_stall));
    check(n_owrite > 0,     $sformatf("attention O writes %0d", n_owrite));
    $display("mechanisms: mode_sw=%0d cmd_stall=%0d swap=%0d prefetch=%0d int8=%0d int4=%0d wht=%0d q4=%0d q8=%0d wb=%0d fwd=%0d attn_stall=%0d owrite=%0d",
             n_mode_sw, n_cmd_stall, n_swap, n_prefetch, n_int8, n_int4, n_wht, n_q4, n_q8, n_wb, n_fwd, n_attn_stall, n_owrite);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
