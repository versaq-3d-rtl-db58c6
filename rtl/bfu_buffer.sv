// bfu_buffer: per-tile BFU buffer holding BF16 operands and results of the
// tile's BFUs in BF16 (SIMD) mode.
//
// One word holds one BF16 value for each of the tile's LANES BFUs. Two read
// ports supply the two operands of a BF16 operation in the same cycle; one
// write port takes either a fill from outside or a write-back from the
// BFUs. Reads have one cycle of latency; a read and a write to the same
// address in one cycle return the old word.
//
// The paper gives only the buffer's purpose ("one dedicated BFU buffer per
// tile for storing BFU inputs and outputs"); the depth, the port count and
// the word organisation are this design's choices.
module bfu_buffer #(
  parameter int unsigned LANES = 64,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  re,
  input  logic [AW-1:0]         ra_a,
  input  logic [AW-1:0]         ra_b,
  output logic [LANES*16-1:0]   rd_a,
  output logic [LANES*16-1:0]   rd_b,
  input  logic                  we,
  input  logic [AW-1:0]         wa,
  input  logic [LANES*16-1:0]   wd
);

  logic [LANES*16-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wa] <= wd;
    if (re) begin
      rd_a <= mem[ra_a];
      rd_b <= mem[ra_b];
    end
  end

endmodule
