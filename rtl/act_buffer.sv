// act_buffer: single-buffered on-chip activation SRAM, used for both the
// 128 KB input buffer and the 256 KB output buffer of the accelerator.
//
// DEPTH words of GROUPS x GW bits with one write enable per lane group, so
// that a half-width producer (64 INT8 results, one BFU tile's 64 BF16
// lanes) can write half a 128-lane word. One read port with one cycle of
// latency and one write port. Default: 2048 x 512 bits = 128 KB (input
// buffer). The output buffer instance uses 1024 x 2048 bits = 256 KB.
//
// The paper gives the sizes and that both buffers are single-buffered;
// word widths and lane-group enables are this design's choices.
module act_buffer #(
  parameter int unsigned GROUPS = 1,
  parameter int unsigned GW     = 512,
  parameter int unsigned DEPTH  = 2048,
  localparam int unsigned WIDTH = GROUPS * GW,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              re,
  input  logic [AW-1:0]     ra,
  output logic [WIDTH-1:0]  rd,
  input  logic [GROUPS-1:0] we,
  input  logic [AW-1:0]     wa,
  input  logic [WIDTH-1:0]  wd
);

  logic [GW-1:0] mem [GROUPS][DEPTH];

  for (genvar g = 0; g < GROUPS; g++) begin : g_grp
    always_ff @(posedge clk) begin
      if (we[g]) mem[g][wa] <= wd[g*GW +: GW];
      if (re)    rd[g*GW +: GW] <= mem[g][ra];
    end
  end

endmodule
