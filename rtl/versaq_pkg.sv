// versaq_pkg: types, constants and arithmetic helpers shared by the VersaQ-3D
// accelerator RTL.
//
// Precision modes: the PE array runs as an INT4 or INT8 output-stationary
// systolic array, or as a BF16 SIMD vector unit (one BFU per SIMD lane).
// BF16 operations: fpadd, fpmul and fptmp (fast inverse square-root seed,
// multiplied by the second operand).
//
// The BF16 helper functions below are used by the dequantization and
// quantization lanes. They follow the same number conventions as the BFU
// pipeline: subnormals are flushed to zero, results are truncated (round
// toward zero), exponents that overflow saturate to infinity (exponent 255,
// mantissa 0). The paper does not give the rounding behaviour; truncation is
// this design's choice because it needs no rounding incrementer.
package versaq_pkg;

  typedef enum logic [1:0] {
    MODE_INT4 = 2'd0,
    MODE_INT8 = 2'd1,
    MODE_BF16 = 2'd2
  } prec_mode_e;

  typedef enum logic [1:0] {
    OP_FPADD = 2'd0,
    OP_FPMUL = 2'd1,
    OP_FPTMP = 2'd2
  } bf_op_e;

  // Commands accepted by the accelerator top.
  typedef enum logic [1:0] {
    OPC_GEMM  = 2'd0,   // INT4/INT8 (or WHT) pass of the systolic array + dequant
    OPC_QUANT = 2'd1,   // output buffer rows -> quant unit -> input buffer
    OPC_BF16  = 2'd2    // one SIMD BF16 operation on the BFU tiles
  } opcode_e;

  typedef struct packed {
    opcode_e     opc;
    prec_mode_e  mode;       // GEMM: MODE_INT4 / MODE_INT8
    logic        wht;        // GEMM: Hadamard transform pass
    logic        max_clr;    // GEMM: clear the token max registers first
    logic [11:0] k_len;      // GEMM: number of reduction beats (>= 1)
    logic [10:0] in_base;    // GEMM: input buffer base; QUANT: destination
    logic [10:0] w_base;     // GEMM: weight buffer base
    logic [9:0]  out_base;   // GEMM / BF16: output buffer base; QUANT: source
    logic [7:0]  rows;       // QUANT: number of tokens (rows), >= 1
    logic        q_int4;     // QUANT: 1 INT4, 0 INT8
    bf_op_e      bf_op;      // BF16: operation
    logic [15:0] tiles;      // BF16: tiles that execute the operation
    logic [3:0]  ra, rb;     // BF16: operand addresses in the BFU buffers
    logic        wb;         // BF16: write the result back to the BFU buffer
    logic [3:0]  wa;         // BF16: write-back address
    logic        fwd;        // BF16: forward a tile's result to the output buffer
    logic [3:0]  fwd_tile;   // BF16: tile whose result is forwarded
    logic        fwd_half;   // BF16: output-buffer half (lanes 0-63 / 64-127)
  } cmd_t;

  // Geometry of the accelerator (Sec. 4.2 / Table 3 of the paper).
  localparam int unsigned N_TILES        = 16;  // BFU tiles
  localparam int unsigned BFUS_PER_TILE  = 64;  // BFUs per tile
  localparam int unsigned PES_PER_BFU    = 4;   // INT8 PEs per BFU
  localparam int unsigned ARRAY_DIM      = 64;  // INT8 PE rows = columns
  localparam int unsigned QLANES         = 128; // quant / dequant lanes

  // BF16 seed constant for the fast inverse square root: upper half of the
  // well-known FP32 constant 0x5F3759DF.
  localparam logic [15:0] RSQRT_MAGIC = 16'h5F37;

  localparam logic [15:0] BF16_ONE = 16'h3F80;

  // Signed 32-bit integer to BF16, truncating.
  function automatic logic [15:0] int_to_bf16(input logic signed [31:0] v);
    logic        s;
    logic [31:0] mag;
    int          lead;
    logic [31:0] norm;
    s    = v[31];
    mag  = s ? 32'(-v) : 32'(v);
    lead = -1;
    for (int i = 0; i < 32; i++) if (mag[i]) lead = i;
    if (lead < 0) return 16'h0000;
    norm = mag << (31 - lead);              // leading one at bit 31
    return {s, 8'(127 + lead), norm[30:24]};
  endfunction

  // BF16 multiply, truncating, flush-to-zero, saturating to infinity.
  function automatic logic [15:0] bf16_mul(input logic [15:0] a, input logic [15:0] b);
    logic        s;
    logic [15:0] p;
    int          e;
    logic [6:0]  m;
    s = a[15] ^ b[15];
    if (a[14:7] == 8'd0 || b[14:7] == 8'd0) return {s, 15'd0};
    p = {1'b1, a[6:0]} * {1'b1, b[6:0]};
    e = int'(a[14:7]) + int'(b[14:7]) - 127;
    if (p[15]) begin
      m = p[14:8];
      e = e + 1;
    end else begin
      m = p[13:7];
    end
    if (e >= 255) return {s, 8'hFF, 7'd0};
    if (e <= 0)   return {s, 15'd0};
    return {s, 8'(e), m};
  endfunction

  // BF16 to signed integer, rounding half away from zero, then clamping to
  // [-qmax, qmax].
  function automatic logic signed [7:0] bf16_to_int_clamp(input logic [15:0] a,
                                                          input logic [7:0]  qmax);
    int         e;
    logic [31:0] sig;
    logic [31:0] mag;
    e   = int'(a[14:7]) - 127;
    sig = {24'd0, 1'b1, a[6:0]};            // value = sig * 2^(e-7)
    if (a[14:7] == 8'd0)   mag = 0;
    else if (e >= 14)      mag = 32'hFFFF;   // far above any clamp limit
    else if (e >= 7)       mag = sig << (e - 7);
    else if (e >= -1)      mag = (sig + (32'd1 << (6 - e))) >> (7 - e);
    else                   mag = 0;
    if (mag > 32'(qmax)) mag = 32'(qmax);
    return a[15] ? -8'(mag) : 8'(mag);
  endfunction

endpackage
