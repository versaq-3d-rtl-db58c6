// weight_buffer: double-buffered on-chip weight SRAM, 2 x 128 KB.
//
// Two banks of DEPTH words of WIDTH bits (default 2 x 2048 x 512 bits =
// 2 x 128 KB, the paper's size). One word is one weight beat for the 64
// INT8 (or 128 INT4) array columns. The array reads the active bank while
// the fill port writes the other one; toggling swap exchanges the roles,
// so the next layer's weights can be loaded from DRAM during computation.
// Reads have one cycle of latency. A fill aimed at the bank being read is
// not blocked here; the caller keeps the two apart (the assertion checks
// it in simulation). The assertion's reset qualifier samples rst_n
// synchronously while the bank-select flop resets asynchronously; lint
// reports this mix, which affects only the simulation check.
//
// The paper gives the size and the double buffering; the word width, the
// bank swap and the port arrangement are this design's choices.
module weight_buffer #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             swap,      // exchange compute and fill banks
  output logic             rd_bank,   // bank the array currently reads
  input  logic             re,
  input  logic [AW-1:0]    ra,
  output logic [WIDTH-1:0] rd,
  input  logic             we,        // fill port, writes the other bank
  input  logic [AW-1:0]    wa,
  input  logic [WIDTH-1:0] wd
);

  logic [WIDTH-1:0] bank0 [DEPTH];
  logic [WIDTH-1:0] bank1 [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    rd_bank <= 1'b0;
    else if (swap) rd_bank <= !rd_bank;
  end

  always_ff @(posedge clk) begin
    if (we && rd_bank)  bank0[wa] <= wd;
    if (we && !rd_bank) bank1[wa] <= wd;
    if (re) rd <= rd_bank ? bank1[ra] : bank0[ra];
  end

  // A fill and a bank swap in the same cycle would leave the written bank
  // ambiguous for the caller.
  a_no_swap_during_fill: assert property (@(posedge clk) disable iff (!rst_n)
    !(we && swap));

endmodule
