// bfu_tile: one BFU tile = 64 BFUs plus the tile's BFU buffer.
//
// Systolic (INT4 / INT8) view: the 64 BFUs are arranged as ROWS x (64/ROWS)
// BFUs; with ROWS = 4 and four INT8 PEs per BFU the tile is a 4 x 64 block
// of INT8 PEs (8 x 128 INT4 PEs). Features enter at the left of each row,
// weights and the result shift chain enter at the top of each of the 64
// INT8 columns and leave at the bottom. 16 tiles stacked vertically give
// the 64 x 64 INT8 array. The arrangement of BFUs inside a tile is not
// given in the paper; this one is chosen so that 16 tiles make a square
// array.
//
// BF16 (SIMD) view: each BFU is a lane. A BF16 command (bf_issue) reads
// operand words at ra_a / ra_b from the BFU buffer (1 cycle), runs them
// through the BFUs (4 cycles) and then either writes the result word back
// to the buffer at wa (wb = 1) or only presents it on res_word with
// res_vld (forwarding to the output buffer). Lane l of a word belongs to
// BFU l = row * (64/ROWS) + column. A fill write (fill_we) and a
// write-back must not occur in the same cycle; write-back wins.
module bfu_tile
  import versaq_pkg::*;
#(
  parameter int unsigned NBFU  = 64,
  parameter int unsigned ROWS  = 4,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned COLS = NBFU / ROWS * 4,   // INT8 PE columns
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  prec_mode_e         mode,
  input  logic               wht,
  input  logic               clr,
  input  logic               shift,
  // systolic ports
  input  logic [7:0]         f_in     [ROWS],
  input  logic [1:0]         f_vld_in [ROWS],
  output logic [7:0]         f_out    [ROWS],
  output logic [1:0]         f_vld_out[ROWS],
  input  logic [7:0]         w_in     [COLS],
  output logic [7:0]         w_out    [COLS],
  input  logic [31:0]        res_in   [COLS],
  output logic [31:0]        res_out  [COLS],
  // BF16 command
  input  logic               bf_issue,
  input  bf_op_e             bf_op,
  input  logic [AW-1:0]      ra_a,
  input  logic [AW-1:0]      ra_b,
  input  logic               wb,
  input  logic [AW-1:0]      wa,
  // BFU buffer fill
  input  logic               fill_we,
  input  logic [AW-1:0]      fill_wa,
  input  logic [NBFU*16-1:0] fill_wd,
  // BF16 results
  output logic               res_vld,
  output logic [NBFU*16-1:0] res_word
);

  localparam int unsigned BPR = NBFU / ROWS;   // BFUs per row

  // ---------------------------------------------------- BF16 command pipe
  logic [NBFU*16-1:0] opa, opb;
  logic               iss_q;
  bf_op_e             op_q;
  logic [4:0]         wb_pipe;
  logic [AW-1:0]      wa_pipe [5];
  logic [NBFU-1:0]    lane_vld;

  bfu_buffer #(.LANES(NBFU), .DEPTH(DEPTH)) u_buf (
    .clk  (clk),
    .re   (bf_issue),
    .ra_a (ra_a),
    .ra_b (ra_b),
    .rd_a (opa),
    .rd_b (opb),
    .we   (wb_pipe[4] || fill_we),
    .wa   (wb_pipe[4] ? wa_pipe[4] : fill_wa),
    .wd   (wb_pipe[4] ? res_word : fill_wd)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iss_q   <= 1'b0;
      op_q    <= OP_FPADD;
      wb_pipe <= '0;
      for (int k = 0; k < 5; k++) wa_pipe[k] <= '0;
    end else begin
      iss_q      <= bf_issue;
      op_q       <= bf_op;
      wb_pipe    <= {wb_pipe[3:0], bf_issue && wb};
      wa_pipe[0] <= wa;
      for (int k = 1; k < 5; k++) wa_pipe[k] <= wa_pipe[k-1];
    end
  end

  // ------------------------------------------------------------- the BFUs
  logic [7:0]  fh  [ROWS][BPR+1];
  logic [1:0]  fvh [ROWS][BPR+1];
  logic [7:0]  wv  [ROWS+1][COLS];
  logic [31:0] rv  [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign fh[r][0]  = f_in[r];
    assign fvh[r][0] = f_vld_in[r];
    assign f_out[r]     = fh[r][BPR];
    assign f_vld_out[r] = fvh[r][BPR];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_col
    assign wv[0][c]   = w_in[c];
    assign rv[0][c]   = res_in[c];
    assign w_out[c]   = wv[ROWS][c];
    assign res_out[c] = rv[ROWS][c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar b = 0; b < BPR; b++) begin : g_b
      localparam int unsigned L = r * BPR + b;
      logic [7:0]  wi [4];
      logic [7:0]  wo [4];
      logic [31:0] ri [4];
      logic [31:0] ro [4];
      for (genvar k = 0; k < 4; k++) begin : g_k
        assign wi[k] = wv[r][b*4+k];
        assign ri[k] = rv[r][b*4+k];
        assign wv[r+1][b*4+k] = wo[k];
        assign rv[r+1][b*4+k] = ro[k];
      end
      bfu u_bfu (
        .clk       (clk),
        .rst_n     (rst_n),
        .mode      (mode),
        .wht       (wht),
        .clr       (clr),
        .shift     (shift),
        .f_in      (fh[r][b]),
        .f_vld_in  (fvh[r][b]),
        .f_out     (fh[r][b+1]),
        .f_vld_out (fvh[r][b+1]),
        .w_in      (wi),
        .w_out     (wo),
        .res_in    (ri),
        .res_out   (ro),
        .bf_vld    (iss_q),
        .bf_op     (op_q),
        .bf_a      (opa[L*16 +: 16]),
        .bf_b      (opb[L*16 +: 16]),
        .bf_out_vld(lane_vld[L]),
        .bf_out    (res_word[L*16 +: 16])
      );
    end
  end

  assign res_vld = lane_vld[0];

endmodule
