// pe_array: the VersaQ-3D compute core, 16 BFU tiles of 64 BFUs each.
//
// INT4 / INT8 modes: an output-stationary systolic array of 64 x 64 INT8
// PEs, or 128 x 128 INT4 PEs. Each cycle one beat enters: a feature byte
// per INT8 row (two INT4 rows per byte in INT4 mode, low nibble = even
// row) and a weight byte per INT8 column (low nibble = even INT4 column).
// The array skews the beat itself: INT8 row / column i is delayed by i
// cycles, INT4 row / column j by j cycles, so the caller feeds unskewed
// words (A[:,k] and B[k,:] for reduction index k). Partial sums stay in the
// PEs. After the last beat has passed, the caller pulses shift to move the
// result words one INT8 row down per cycle; res_out shows the bottom row
// first (INT8 row 63), row 0 after 63 shifts. A result word holds one INT8
// result (INT8 mode) or {R3, R2, R1, R0} of a 2 x 2 INT4 block (INT4 mode).
//
// WHT mode (wht = 1): the feature path carries Hadamard signs instead of
// data. The array derives them from the beat index k_idx at its left edge:
// INT4 / INT8 row r receives sign parity(k_idx & r), so that the PEs
// multiply by H[k][r] = (-1)^popcount(k & r) without storing H. The data to
// be transformed enters on the weight path and column c accumulates
// sum_k H[k][r] * x_c[k] in row r. The paper states that the INT4 PE
// multiplexer supplies +-1 coefficients; generating the sign from the beat
// index is this design's choice.
//
// BF16 mode: every tile is a 64-lane SIMD unit with its own BFU buffer. A
// BF16 command goes to the tiles selected by bf_tiles; each tile returns its
// result word on res_word[t] with res_vld[t] five cycles after issue.
module pe_array
  import versaq_pkg::*;
#(
  parameter int unsigned NTILES = 16,
  parameter int unsigned NBFU   = 64,
  parameter int unsigned ROWS   = 4,    // INT8 PE rows per tile
  parameter int unsigned DEPTH  = 16,   // BFU buffer depth
  localparam int unsigned N     = NTILES * ROWS,     // INT8 rows
  localparam int unsigned M     = NBFU / ROWS * 4,   // INT8 columns
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  prec_mode_e         mode,
  input  logic               wht,
  input  logic               clr,
  input  logic               shift,
  // systolic beat
  input  logic               beat_vld,
  input  logic [6:0]         k_idx,
  input  logic [N*8-1:0]     f_word,
  input  logic [M*8-1:0]     w_word,
  output logic [31:0]        res_out [M],
  // BF16 command
  input  logic [NTILES-1:0]  bf_tiles,
  input  logic               bf_issue,
  input  bf_op_e             bf_op,
  input  logic [AW-1:0]      ra_a,
  input  logic [AW-1:0]      ra_b,
  input  logic               wb,
  input  logic [AW-1:0]      wa,
  input  logic [NTILES-1:0]  fill_we,
  input  logic [AW-1:0]      fill_wa,
  input  logic [NBFU*16-1:0] fill_wd,
  output logic [NTILES-1:0]  res_vld,
  output logic [NBFU*16-1:0] res_word [NTILES]
);

  logic int4;
  assign int4 = (mode == MODE_INT4);

  // ------------------------------------------------------------ row skew
  logic [7:0] f_sk  [N];
  logic [1:0] fv_sk [N];

  for (genvar r = 0; r < N; r++) begin : g_rsk
    localparam int unsigned L = 2 * r + 1;     // longest delay needed
    logic [7:0] byte_in;
    logic [4:0] sr_lo [L+1];                    // {vld, nibble}
    logic [4:0] sr_hi [L+1];
    always_comb begin
      if (wht)
        byte_in = int4 ? {3'b0, ^(k_idx & 7'(2*r+1)), 3'b0, ^(k_idx & 7'(2*r))}
                       : {7'b0, ^(k_idx & 7'(r))};
      else
        byte_in = f_word[r*8 +: 8];
      sr_lo[0] = {beat_vld, byte_in[3:0]};
      sr_hi[0] = {beat_vld, byte_in[7:4]};
    end
    for (genvar d = 1; d <= L; d++) begin : g_d
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          sr_lo[d] <= '0;
          sr_hi[d] <= '0;
        end else begin
          sr_lo[d] <= sr_lo[d-1];
          sr_hi[d] <= sr_hi[d-1];
        end
      end
    end
    always_comb begin
      if (int4) begin
        f_sk[r]  = {sr_hi[2*r+1][3:0], sr_lo[2*r][3:0]};
        fv_sk[r] = {sr_hi[2*r+1][4],   sr_lo[2*r][4]};
      end else begin
        f_sk[r]  = {sr_hi[r][3:0], sr_lo[r][3:0]};
        fv_sk[r] = {sr_lo[r][4],   sr_lo[r][4]};
      end
    end
  end

  // --------------------------------------------------------- column skew
  logic [7:0] w_sk [M];

  for (genvar c = 0; c < M; c++) begin : g_csk
    localparam int unsigned L = 2 * c + 1;
    logic [3:0] sr_lo [L+1];
    logic [3:0] sr_hi [L+1];
    assign sr_lo[0] = w_word[c*8 +: 4];
    assign sr_hi[0] = w_word[c*8+4 +: 4];
    for (genvar d = 1; d <= L; d++) begin : g_d
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          sr_lo[d] <= '0;
          sr_hi[d] <= '0;
        end else begin
          sr_lo[d] <= sr_lo[d-1];
          sr_hi[d] <= sr_hi[d-1];
        end
      end
    end
    assign w_sk[c] = int4 ? {sr_hi[2*c+1], sr_lo[2*c]} : {sr_hi[c], sr_lo[c]};
  end

  // -------------------------------------------------------------- tiles
  // Tile t takes weights and results from tile t-1 (tile 0 from the skew
  // lines and zero); results leave at the bottom of the last tile.

  for (genvar t = 0; t < NTILES; t++) begin : g_t
    logic [7:0] fi  [ROWS];
    logic [1:0] fvi [ROWS];
    logic [7:0] fo  [ROWS];
    logic [1:0] fvo [ROWS];
    logic [7:0]  wi [M];
    logic [7:0]  wo [M];
    logic [31:0] ri [M];
    logic [31:0] ro [M];
    for (genvar r = 0; r < ROWS; r++) begin : g_r
      assign fi[r]  = f_sk[t*ROWS + r];
      assign fvi[r] = fv_sk[t*ROWS + r];
    end
    if (t == 0) begin : g_first
      for (genvar c = 0; c < M; c++) begin : g_c
        assign wi[c] = w_sk[c];
        assign ri[c] = '0;
      end
    end else begin : g_next
      for (genvar c = 0; c < M; c++) begin : g_c
        assign wi[c] = g_t[t-1].wo[c];
        assign ri[c] = g_t[t-1].ro[c];
      end
    end
    if (t == NTILES - 1) begin : g_last
      for (genvar c = 0; c < M; c++) begin : g_c
        assign res_out[c] = ro[c];
      end
    end
    bfu_tile #(.NBFU(NBFU), .ROWS(ROWS), .DEPTH(DEPTH)) u_tile (
      .clk       (clk),
      .rst_n     (rst_n),
      .mode      (mode),
      .wht       (wht),
      .clr       (clr),
      .shift     (shift),
      .f_in      (fi),
      .f_vld_in  (fvi),
      .f_out     (fo),
      .f_vld_out (fvo),
      .w_in      (wi),
      .w_out     (wo),
      .res_in    (ri),
      .res_out   (ro),
      .bf_issue  (bf_issue && bf_tiles[t]),
      .bf_op     (bf_op),
      .ra_a      (ra_a),
      .ra_b      (ra_b),
      .wb        (wb),
      .wa        (wa),
      .fill_we   (fill_we[t]),
      .fill_wa   (fill_wa),
      .fill_wd   (fill_wd),
      .res_vld   (res_vld[t]),
      .res_word  (res_word[t])
    );
  end

endmodule
