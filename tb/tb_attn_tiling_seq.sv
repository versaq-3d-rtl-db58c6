// tb_attn_tiling_seq: self-checking test of the two-stage attention tiling
// schedule at the paper's tile sizes (T_Q = T_K = 64, T_V = 2048).
// The expected command list is built here from the loop nest of the
// algorithm; the DUT's commands are taken with a randomly stalling ready and
// compared one by one. Checks per sequence length: the O tile is written
// exactly once per Q tile (O(N) traffic), each stage scans every K tile once
// per Q tile, and the command stream never advances while ready is low.
module tb_attn_tiling_seq;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, cmd_vld, cmd_rdy;
  logic [15:0] n_tokens, cmd_q, cmd_k, cmd_v, stage1_cnt, stage2_cnt, owrite_cnt;
  logic [1:0] cmd_kind;

  int checks = 0, failures = 0;

  attn_tiling_seq dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  typedef struct { int kind, q, k, v; } cmd_s;
  cmd_s exp_q [$];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic build(input int n);
    int nq, nk, nv;
    nq = (n + 63) / 64; nk = (n + 63) / 64; nv = (n + 2047) / 2048;
    exp_q.delete();
    for (int i = 0; i < nq; i++) begin
      for (int j = 0; j < nk; j++) exp_q.push_back('{0, i, j, 0});
      for (int v = 0; v < nv; v++) begin
        for (int m = 0; m < 32; m++)
          if (v * 32 + m < nk) exp_q.push_back('{1, i, v * 32 + m, v});
        exp_q.push_back('{2, i, 0, v});
      end
      exp_q.push_back('{3, i, 0, 0});
    end
  endtask

  task automatic run(input int n);
    int ncmd, nq, nk;
    logic [1:0] hk; logic [15:0] hq;
    bit stalled;
    build(n);
    ncmd = exp_q.size();
    nq = (n + 63) / 64; nk = (n + 63) / 64;
    @(negedge clk);
    n_tokens = 16'(n); start = 1;
    @(negedge clk);
    start = 0;
    stalled = 0;
    while (busy) begin
      cmd_rdy = ($urandom_range(0, 3) != 0);
      if (stalled) check(cmd_kind == hk && cmd_q == hq, "held while not ready");
      #1;
      if (cmd_vld && cmd_rdy) begin
        cmd_s e;
        e = exp_q.pop_front();
        check(int'(cmd_kind) == e.kind && int'(cmd_q) == e.q &&
              (e.kind == 2 || e.kind == 3 || int'(cmd_k) == e.k) &&
              (e.kind == 0 || e.kind == 3 || int'(cmd_v) == e.v),
              $sformatf("N=%0d cmd %0d/%0d/%0d/%0d expected %0d/%0d/%0d/%0d", n,
                        cmd_kind, cmd_q, cmd_k, cmd_v, e.kind, e.q, e.k, e.v));
        stalled = 0;
      end else begin
        stalled = cmd_vld;
        hk = cmd_kind; hq = cmd_q;
      end
      @(negedge clk);
    end
    cmd_rdy = 0;
    check(exp_q.size() == 0, $sformatf("N=%0d all %0d commands issued", n, ncmd));
    check(int'(owrite_cnt) == nq, "one O write per Q tile");
    check(int'(stage1_cnt) == nq * nk, "stage 1 scans every K tile");
    check(int'(stage2_cnt) == nq * nk, "stage 2 recomputes every K tile");
  endtask

  int done_cnt = 0;
  always @(posedge clk) if (done) done_cnt++;

  initial begin
    start = 0; n_tokens = 0; cmd_rdy = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1);
    run(64);
    run(100);
    run(2048);
    run(4100);     // partial last V tile
    repeat (2) @(negedge clk);
    check(done_cnt == 5, "done pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
