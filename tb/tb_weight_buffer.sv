// tb_weight_buffer: self-checking test of the double-buffered weight buffer
// at its full size (2 x 2048 x 512 bits). Fills the shadow bank while the
// array bank is being read, swaps, and checks that reads see the new
// weights and that reading was undisturbed by the concurrent fill.
module tb_weight_buffer;
  localparam int W = 512, D = 2048;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic swap, rd_bank, re, we;
  logic [10:0] ra, wa;
  logic [W-1:0] rd, wd;

  int checks = 0, failures = 0;
  int n_swaps = 0;

  weight_buffer dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // content pattern: word a of generation g
  function automatic logic [W-1:0] pat(input int g, input int a);
    logic [W-1:0] w;
    for (int i = 0; i < W / 32; i++) w[i*32 +: 32] = 32'(g * 1000003 + a * 7919 + i * 104729);
    return w;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    swap = 0; re = 0; we = 0; ra = 0; wa = 0; wd = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(rd_bank == 1'b0, "reset bank");
    for (int g = 0; g < 4; g++) begin
      // fill the shadow bank with generation g while reading the active one
      for (int a = 0; a < D; a += 3) begin
        @(negedge clk);
        we = 1; wa = 11'(a); wd = pat(g, a);
        re = (g > 0); ra = 11'(a);
        @(posedge clk); #1;
        if (g > 0) check(rd == pat(g - 1, a), "read during fill");
      end
      @(negedge clk); we = 0; re = 0;
      swap = 1; @(negedge clk); swap = 0; n_swaps++;
      check(rd_bank == 1'(g[0] ^ 1'b1), "bank toggled");
      for (int t = 0; t < 50; t++) begin
        int a;
        a = 3 * $urandom_range(0, (D - 1) / 3);
        @(negedge clk); re = 1; ra = 11'(a);
        @(posedge clk); #1;
        check(rd == pat(g, a), "read after swap");
      end
    end
    check(n_swaps == 4, "swaps");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
