// tb_pe_array: self-checking test of the systolic array / SIMD core.
// Runs with 4 tiles (16 INT8 rows x 64 INT8 columns, i.e. 32 x 128 INT4
// PEs) to keep simulation short; the full 16-tile array is exercised by the
// top-level test. Checks, against plain matrix arithmetic:
//  - INT8 GEMM: res(r,c) = sum_k A[r][k] * B[k][c], 32-bit results
//  - INT4 GEMM: 2 x 2 INT4 blocks per result word, 8-bit wrapping sums
//  - WHT in INT8 and INT4 modes: res(r,c) = sum_k H[k][r] * X[k][c] with
//    H[k][r] = (-1)^popcount(k & r), signs generated inside the array
//  - result drain: bottom row first, one row per shift
//  - BF16 commands reach only the tiles selected by bf_tiles
module tb_pe_array;
  import versaq_pkg::*;
  localparam int NT = 4, NBFU = 64, ROWS = 4, DEPTH = 16;
  localparam int N = NT * ROWS, M = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  prec_mode_e mode;
  logic wht, clr, shift, beat_vld;
  logic [6:0] k_idx;
  logic [N*8-1:0] f_word;
  logic [M*8-1:0] w_word;
  logic [31:0] res_out [M];
  logic [NT-1:0] bf_tiles, fill_we, res_vld;
  logic bf_issue, wb;
  bf_op_e bf_op;
  logic [3:0] ra_a, ra_b, wa, fill_wa;
  logic [NBFU*16-1:0] fill_wd;
  logic [NBFU*16-1:0] res_word [NT];

  int checks = 0, failures = 0;

  pe_array #(.NTILES(NT), .NBFU(NBFU), .ROWS(ROWS), .DEPTH(DEPTH)) dut (.*);

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


  function automatic int hsign(input int k, input int r);
    return ($countones(k & r) % 2) ? -1 : 1;
  endfunction

  function automatic int s4(input int v);   // wrap to signed 4 bits
    v = v & 15;
    return (v >= 8) ? v - 16 : v;
  endfunction

  // A: N2 x K feature matrix, B: K x M2 weight matrix (element sizes by mode)
  int A [128][128];
  int B [128][128];

  // Runs one pass of K beats and checks every result. int4: 2N x 2M INT4
  // results; WHT: A is ignored and H is used.
  task automatic run_pass(input bit int4, input bit w, input int K);
    int nr, nc;
    nr = int4 ? 2 * N : N;
    nc = int4 ? 2 * M : M;
    mode = int4 ? MODE_INT4 : MODE_INT8;
    wht = w;
    for (int k = 0; k < K; k++) begin
      for (int r = 0; r < nr; r++) A[r][k] = int4 ? $urandom_range(0, 15) - 8 : $urandom_range(0, 255) - 128;
      for (int c = 0; c < nc; c++) B[k][c] = int4 ? $urandom_range(0, 15) - 8 : $urandom_range(0, 255) - 128;
      if (w) for (int r = 0; r < nr; r++) A[r][k] = hsign(k, r);
    end
    @(negedge clk);
    clr = 1; @(negedge clk); clr = 0;
    for (int k = 0; k < K; k++) begin
      beat_vld = 1; k_idx = 7'(k);
      for (int r = 0; r < N; r++)
        f_word[r*8 +: 8] = int4 ? {4'(A[2*r+1][k]), 4'(A[2*r][k])} : 8'(A[r][k]);
      for (int c = 0; c < M; c++)
        w_word[c*8 +: 8] = int4 ? {4'(B[k][2*c+1]), 4'(B[k][2*c])} : 8'(B[k][c]);
      @(negedge clk);
    end
    beat_vld = 0; f_word = '0; w_word = '0;
    repeat (2 * (2 * N + 2 * M) + 4) @(negedge clk);
    for (int r = N - 1; r >= 0; r--) begin
      for (int c = 0; c < M; c++) begin
        if (!int4) begin
          int acc;
          acc = 0;
          for (int k = 0; k < K; k++) acc += A[r][k] * B[k][c];
          check(res_out[c] == 32'(acc), $sformatf("%s INT8 (%0d,%0d) got %0d exp %0d",
                w ? "WHT" : "GEMM", r, c, $signed(res_out[c]), acc));
        end else begin
          for (int q = 0; q < 4; q++) begin
            int rr, cc, acc;
            rr = 2 * r + q / 2; cc = 2 * c + q % 2;
            acc = 0;
            for (int k = 0; k < K; k++) acc += A[rr][k] * B[k][cc];
            check(res_out[c][q*8 +: 8] == 8'(acc), $sformatf("%s INT4 (%0d,%0d) got %0d exp %0d",
                  w ? "WHT" : "GEMM", rr, cc, $signed(res_out[c][q*8 +: 8]), $signed(8'(acc))));
          end
        end
      end
      shift = 1; @(negedge clk); shift = 0;
    end
  endtask

  initial begin
    logic [15:0] sh [NT][2][NBFU];
    mode = MODE_INT8; {wht, clr, shift, beat_vld} = '0; k_idx = 0;
    f_word = '0; w_word = '0;
    bf_tiles = '0; bf_issue = 0; wb = 0; bf_op = OP_FPADD;
    {ra_a, ra_b, wa, fill_wa} = '0; fill_we = '0; fill_wd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    run_pass(0, 0, 40);    // INT8 GEMM
    run_pass(1, 0, 50);    // INT4 GEMM
    run_pass(0, 1, 64);    // 64-point WHT, INT8
    run_pass(1, 1, 128);   // 128-point WHT, INT4
    run_pass(0, 0, 3);     // short reduction

    // ---- BF16: fill words 0 and 1 of every tile, issue to tiles 0 and 2
    mode = MODE_BF16; wht = 0;
    for (int t = 0; t < NT; t++)
      for (int a = 0; a < 2; a++) begin
        fill_we = '0; fill_we[t] = 1; fill_wa = 4'(a);
        for (int l = 0; l < NBFU; l++) begin
          sh[t][a][l] = {1'($urandom), 8'($urandom_range(115, 135)), 7'($urandom)};
          fill_wd[l*16 +: 16] = sh[t][a][l];
        end
        @(negedge clk);
      end
    fill_we = '0;
    for (int op = 0; op < 3; op++) begin
      int seen;
      bf_tiles = 4'b0101; bf_issue = 1; bf_op = bf_op_e'(op); ra_a = 0; ra_b = 1;
      @(negedge clk);
      bf_issue = 0;
      seen = 0;
      for (int d = 1; d <= 6; d++) begin
        if (res_vld != 0) begin
          seen++;
          check(d == 5, $sformatf("BF16 latency %0d", d));
          check(res_vld == 4'b0101, "only selected tiles respond");
          for (int t = 0; t < NT; t += 2)
            for (int l = 0; l < NBFU; l++)
              check(res_word[t][l*16 +: 16] == ref_op(bf_op_e'(op), sh[t][0][l], sh[t][1][l]),
                    $sformatf("tile %0d lane %0d op %0d", t, l, op));
        end
        @(negedge clk);
      end
      check(seen == 1, "one BF16 result");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
