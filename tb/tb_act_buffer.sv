// tb_act_buffer: self-checking test of the activation buffer with the
// output-buffer configuration (two 1024-bit lane groups, 1024 words =
// 256 KB): per-group write enables, one-cycle reads, random traffic
// against a shadow copy.
module tb_act_buffer;
  localparam int G = 2, GW = 1024, D = 1024;
  logic clk = 0;
  always #5 clk = ~clk;

  logic re;
  logic [9:0] ra, wa;
  logic [G*GW-1:0] rd, wd;
  logic [G-1:0] we;
  logic [G*GW-1:0] shadow [D];
  logic [D-1:0] written;

  int checks = 0, failures = 0;

  act_buffer #(.GROUPS(G), .GW(GW), .DEPTH(D)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [G*GW-1:0] rnd_word();
    logic [G*GW-1:0] w;
    for (int i = 0; i < G * GW / 32; i++) w[i*32 +: 32] = $urandom;
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
    re = 0; ra = 0; wa = 0; wd = 0; we = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = '1; wa = 10'(a); wd = rnd_word(); shadow[a] = wd;
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      we = 2'($urandom); wa = 10'($urandom); wd = rnd_word();
      for (int g = 0; g < G; g++) if (we[g]) shadow[wa][g*GW +: GW] = wd[g*GW +: GW];
      @(negedge clk);
      we = 0; re = 1; ra = 10'($urandom);
      @(posedge clk); #1;
      re = 0;
      check(rd == shadow[ra], "read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
