// tb_bfu_buffer: self-checking test of the per-tile BFU buffer.
// Random writes and dual reads against a shadow array; checks the one-cycle
// read latency and read-before-write on an address collision.
module tb_bfu_buffer;
  localparam int LANES = 64, DEPTH = 16;
  logic clk = 0;
  always #5 clk = ~clk;

  logic re, we;
  logic [3:0] ra_a, ra_b, wa;
  logic [LANES*16-1:0] rd_a, rd_b, wd;
  logic [LANES*16-1:0] shadow [DEPTH];

  int checks = 0, failures = 0;

  bfu_buffer #(.LANES(LANES), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [LANES*16-1:0] rnd_word();
    logic [LANES*16-1:0] w;
    for (int i = 0; i < LANES / 2; i++) w[i*32 +: 32] = $urandom;
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
    logic [LANES*16-1:0] ea, eb;
    re = 0; we = 0; ra_a = 0; ra_b = 0; wa = 0; wd = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; wa = 4'(a); wd = rnd_word(); shadow[a] = wd;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      re = 1; ra_a = 4'($urandom); ra_b = 4'($urandom);
      ea = shadow[ra_a]; eb = shadow[ra_b];
      we = 1'($urandom); wa = 4'($urandom); wd = rnd_word();
      if (we) shadow[wa] = wd;
      @(negedge clk);
      re = 0; we = 0;
      check(rd_a == ea && rd_b == eb, "dual read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
