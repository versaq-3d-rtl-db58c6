# VersaQ-3D accelerator in SystemVerilog

VersaQ-3D runs quantized Visual Geometry Grounded Transformers (VGGT, a feed-forward
3D-reconstruction network) on an edge chip. Two ideas drive the hardware:

* **One array, three number formats.** Linear layers run in INT4 or INT8 after an online
  Walsh–Hadamard rotation has flattened activation outliers. LayerNorm, Softmax and other
  non-linear parts stay in BF16. Instead of a separate floating-point unit, the integer
  multipliers of the array are regrouped: four 4-bit PEs make an 8-bit PE, four 8-bit PEs plus a
  little glue logic make a *Bitwidth Flexible Unit* (BFU). A BFU is one lane of a BF16 SIMD
  machine or one row segment of the integer systolic array. The same PEs also apply ±1
  Hadamard coefficients, so the rotation needs no stored matrix.
* **Global attention with O(N) off-chip writes.** VGGT's global attention spans all frames, so
  the sequence is N = frames × patches tokens. The score matrix cannot stay on chip. A two-stage
  schedule first scans all K tiles to get the softmax statistics. It then *recomputes* the
  scores, now cheaply in INT precision, and writes every output tile exactly once.

This repository holds synthesizable RTL for the compute array and all its levels, the
buffers, the precision-transition units, a command sequencer that ties them together, and the
two-stage attention schedule generator. Each block has a self-checking testbench.

## Hierarchy and geometry

```
versaq3d_top
 ├─ act_buffer      input buffer   2048 × 512 bit  (128 KB)
 ├─ weight_buffer   2 banks × 2048 × 512 bit (2 × 128 KB), double-buffered
 ├─ act_buffer      output buffer  1024 × 2048 bit (256 KB, 128 BF16 lanes, 2 lane groups)
 ├─ pe_array        16 × bfu_tile
 │    └─ bfu_tile   64 × bfu  +  bfu_buffer (16 × 64 BF16 words)
 │         └─ bfu   4 × int8_pe + BF16 pipeline glue
 │              └─ int8_pe  4 × int4_pe + shift/add tree + 32-bit accumulator
 ├─ dequant_unit    128 lanes: INT → BF16, |x|, 7-level max tree, per-token max
 ├─ quant_unit      128 lanes: approximate 1/max, scale, round, clamp → INT4/INT8
 └─ attn_tiling_seq two-stage recomputation schedule (T_Q = T_K = 64, T_V = 2048)
versaq_pkg          shared types (modes, opcodes, command struct) and BF16 helper functions
```

There are 16 × 64 × 4 = 4096 INT8 PEs, arranged as a 64 × 64 INT8 array. With each INT8 PE
split into a 2 × 2 block of INT4 PEs, the same hardware is a 128 × 128 INT4 array. Each tile
places its 64 BFUs as 4 rows × 16 BFUs, so a tile is a 4 × 64 strip of INT8 PEs. The 16 tiles
are stacked vertically. Features move left to right along a row. Weights and drained results
move top to bottom through the tiles.

All sizes are parameters. Their defaults are the full design: `NTILES = 16`, `NBFU = 64`,
buffer depths as listed above. The placement of BFUs inside a tile (`ROWS = 4`) and the BFU
buffer depth (16 words) are not given by the source design. They are choices made here.

## The processing element levels

### INT4 PE (`int4_pe`)

The basic cell has these parts:

* a 4-bit multiplier, implemented here as 5 × 5 bits so that each operand can be signed or
  unsigned;
* an 8-bit adder with its partial-sum register;
* a result register R_reg;
* pass registers for the feature (to the right) and the weight (downwards);
* a feature-side multiplexer that substitutes a ±1 Hadamard coefficient in WHT mode.

A second multiplexer ("INT8?") picks what goes into R_reg. In INT4 mode R_reg takes the
running 8-bit sum. In INT8 and BF16 modes it takes the raw product, which the INT8 PE above it
combines. R_reg can also load the R_reg of the PE above it. That chain drains INT4 results.

R_reg is 10 bits here, not 8. The product of a signed and an unsigned nibble needs up to 9
signed bits, and the INT8 mode needs those bits exact. The INT4 sums still wrap at 8 bits, as
an 8-bit adder does.

A clear (`clr`) also kills the valid bits that leave a PE in that cycle. Without this, operands
still in flight from a previous BF16 or GEMM pass would be added into the freshly cleared
accumulators.

### INT8 PE (`int8_pe`)

The INT8 PE works in three modes:

* **INT4:** the four INT4 PEs form a 2 × 2 output-stationary mini-array. The byte on the feature
  port is two INT4 rows, low nibble first. The weight byte is two INT4 columns. The result word
  is `{R3, R2, R1, R0}` = `{(odd,odd), (odd,even), (even,odd), (even,even)}`, 8 bits each.
* **INT8:** both operands are split into nibbles: low nibbles unsigned, high nibbles signed. The
  partial products are
  `P0 = Fl·Wl, P1 = Fl·Wh, P2 = Fh·Wl, P3 = Fh·Wh`. The tree forms
  `(P3 << 8) + ((P1 + P2) << 4) + P0`, which is added into a 32-bit accumulator.
* **BF16:** the same multipliers and tree form the product of two unsigned 8-bit significands.
  The accumulator is bypassed. Its adder is reused, with a one-cycle register, for the
  exponent and significand additions the BFU needs.

### BFU and its BF16 pipeline (`bfu`)

This is the least obvious part of the design. A BFU evaluates `fpadd`, `fpmul` and `fptmp` in
four stages at one operation per cycle. The only arithmetic it uses is the four INT8 PEs it
already has. The glue logic only steers bits.

| stage | `fpmul` | `fpadd` | `fptmp(a, b)` |
|---|---|---|---|
| 1 | pass | pass | PE0 adder: `a' = 0x5F37 − (a >> 1)` (the inverse-square-root seed, bit-level) |
| 2 | SD transform of both operands; PE1 adder: `ea + eb − 127` | SD transform; PE1 adder: `ea − eb` | as `fpmul` with `a'` |
| 3 | clamp the exponent | clamp logic orders the operands; two's-power LUT gives `2^(7−d)` (0 if d > 7); PE2 multiplier aligns the smaller significand | clamp |
| 4 | PE3 multiplier: 8 × 8 significand product; normalise | PE3 adder: `±(larger << 7) ± aligned`; leading-one detect and normalise | as `fpmul` |

The SD (signed-digit) transform turns sign and `1.mantissa` into a two's-complement significand.
This design makes it 9 bits wide, because −255 does not fit in 8. Multiplication uses the
magnitudes, and the sign is the XOR of the two signs.

`fptmp(a, b)` returns `b × seed(a)`. With `b = 1.0` it is the bare seed. With a general `b`,
one Newton step `y·(1.5 − 0.5·x·y²)` can be built from `fptmp`, `fpmul` and `fpadd` commands
that write back into the BFU buffer. Which operand `fptmp` multiplies by is a choice made here.

Number conventions, all chosen here:

* results are truncated, not rounded;
* subnormal inputs and results are flushed to zero;
* an exponent overflow saturates to infinity;
* NaN inputs are not treated specially;
* `fpadd` keeps 7 bits of alignment, so an operand smaller by more than 2⁷ is dropped.

Latency is exactly 4 cycles from `bf_vld` to `bf_out_vld`. The testbench checks this on every
result.

### BFU tile and array (`bfu_tile`, `pe_array`)

In BF16 mode a tile is a 64-lane SIMD unit. A command reads two operand words from the tile's
BFU buffer (one cycle) and runs them through the 64 BFUs (four cycles). The result word can go
back into the buffer for the next step of a multi-step operation, or out to the output buffer.
`bf_tiles` selects which tiles execute a command. Results appear **5 cycles after issue**.

In INT modes `pe_array` is the 64 × 64 (or 128 × 128) output-stationary array. The array skews
its inputs itself: INT8 row/column *i* is delayed *i* cycles, INT4 row/column *j* by *j* cycles.
The caller therefore feeds plain buffer words: column *k* of A on the feature side and row *k*
of B on the weight side, one per cycle. After the wavefront has passed, each `shift` moves the
result words down one INT8 row. The bottom row (row 63) appears first on `res_out`.

**WHT mode.** Output row *r* of a Hadamard product needs the coefficient `H[k][r]`. That is
`(−1)^popcount(k & r)`: the parity of the bit-wise AND of the beat index and the row index. The
left edge of the array computes this parity from the beat index `k_idx` and sends only a sign
bit down the feature path. There, each PE's multiplexer turns it into +1 or −1. The vector to
be rotated enters on the weight path, so column *c* accumulates `Σ_k H[k][r]·x_c[k]`. One pass
covers a 64-point (INT8) or 128-point (INT4) transform, with no Hadamard matrix stored
anywhere.

## Precision transitions (`dequant_unit`, `quant_unit`)

Results leave the array as integers. Between layers they must become BF16 (for non-linear
operations) and then INT again (as the next layer's input). Both units are 128 lanes wide and
process one token (one output row) per cycle, which matches the drain rate of the array.

* **Dequantization** computes `bf16(int) × (s_w·s_a)` per lane, one cycle. The 128 magnitudes
  go through a 7-level compare tree, and a per-token "local max" register keeps the largest
  |x| seen for that token. It spans all column tiles of a layer until `max_clr`.
* **Quantization** builds an approximate reciprocal of the token max in two parts:
  * the exponent is `253 − e`, or `254 − e` for a zero mantissa;
  * a 128-entry mantissa table holds `floor(32768 / (128 + m)) − 128`, computed at elaboration.

  The reciprocal times `qmax` (7 or 127) is the inverse scale. Every lane is multiplied by it,
  rounded half away from zero and clamped to ±qmax. The token scale `max / qmax` is returned
  for the next dequantization. Output comes 2 cycles after the input.

One source description contradicts itself here: its resource table lists the compare tree
under quantization and clamp/round under dequantization. This RTL follows the block diagram
and the prose instead: the max is found while dequantizing, and the clamp and round happen
while quantizing.

## Command interface and sequencing (`versaq3d_top`)

The top takes one `cmd_t` at a time (`cmd_vld`/`cmd_rdy`; `cmd_done` pulses at the end). A
command queued behind a running one is simply held off by `cmd_rdy`.

* **`OPC_GEMM`** runs one pass of the integer array:
  1. clear the array;
  2. stream `k_len` beats from input buffer `[in_base…]` and weight buffer `[w_base…]`;
  3. wait `4·64 + 8` cycles for the wavefront to leave;
  4. drain 64 result rows. In INT4 mode each INT8 row is read in two cycles, odd INT4 row
     first, for 128 token rows.

  Each drained row goes through dequantization into output-buffer word `out_base + row`. INT8
  results fill lanes 0–63; INT4 results fill all 128 lanes. Setting `wht` makes the pass a
  Hadamard rotation of the weight-side data.
* **`OPC_QUANT`** reads `rows` output-buffer words. Each word is quantized with its token's
  tracked max and written to input-buffer word `in_base + t`. INT4 tokens become 128 packed
  nibbles; INT8 tokens become lanes 0–63 as bytes. Each token's scale appears on `q_scale`.
* **`OPC_BF16`** issues one BFU operation to the selected tiles. The result can be written back
  (`wb`, `wa`) and/or forwarded: one tile's 64 results go to half (`fwd_half`) of output-buffer
  word `out_base`.

The host (standing in for DRAM and a controller) fills the buffers through their fill ports.
Weights always go into the bank the array is not reading, so the next layer's weights can load
while a GEMM runs. `w_swap` exchanges the banks, and an assertion forbids a swap in the same
cycle as a fill.

The command format, the FSM and all the latencies above are this implementation's own. The
source describes the blocks and how data flows between them, but gives no controller.

## Two-stage attention tiling (`attn_tiling_seq`)

With `N_Q = N_K = ⌈N/64⌉` and `N_V = ⌈N/2048⌉`, the generator emits this loop nest for each
Q tile *i*:

```
stage 1: for j in K tiles:            STATS(i, j)        -- running max / sum of exp
stage 2: for v in V tiles:
            for m in the ≤32 K tiles of V tile v:  SOFTMAX(i, k = 32v+m, v)  -- recompute scores
            SV(i, v)                                  -- accumulate P·V for this V tile
         OWRITE(i)                                    -- the O tile leaves the chip, once
```

It uses a valid/ready handshake and counts stage-1 passes, stage-2 passes and O-tile writes.
For N tokens it issues exactly ⌈N/64⌉ O writes: off-chip write traffic is linear in N. The
block produces the schedule only. It does not contain the softmax arithmetic (see the limits
below).

## Departures from the source design

* R_reg is 10 bits, not 8, and the SD-transform output is 9 bits, not 8. Both are needed for
  exact INT8 and BF16 significand products.
* The quantization and dequantization duties follow the block diagram, not the resource table
  (see above).
* The softmax statistics unit (running max, exp, running sum, division) is not built. Its
  exponential has no described hardware: the BFU offers only `fpadd`, `fpmul` and `fptmp`.
  Attention is represented by its schedule generator.
* There is no off-chip memory controller. The LPDDR5 side is represented by buffer fill and read
  ports.
* Only one command runs at a time: the drain of one GEMM does not overlap the feed of the next.
  Rates per operation are exact, but end-to-end throughput is lower than a fully overlapped
  controller would reach.
* Memories are plain arrays, not SRAM macros.

## Workloads

Every layer of VGGT becomes a sequence of GEMM passes. Weights stream through the
double-buffered weight buffer, because the model does not fit on chip: about 1.2 billion
parameters, roughly 600 MB at 4 bits.

* **W4A8 linear layers** run in INT8 mode, with 4-bit weights sign-extended. A hidden size of
  1024 means 1024 reduction beats, well inside the 2048-word buffers. The 32-bit accumulator
  cannot overflow there.
* **W4A4 linear layers** run in INT4 mode. The INT4 PE has the 8-bit adder and result register
  of the source design, so a partial sum wraps as soon as it leaves ±127. Exact results need
  either short reductions or a software split of the reduction into chunks whose sums stay in
  range. The source does not say how long INT4 reductions are accumulated, and this RTL does not
  widen the adder.
* **Global attention:**
  * *Working set:* one 64 × 64 Q tile, one K tile and one 2048 × 64 V tile. At INT8 the V tile
    is 128 KB, exactly one weight bank.
  * *Schedule:* sequence lengths of 256 to 2048 tokens, the range used for the traffic
    comparison, mean 4 to 32 Q tiles and as many O-tile writes.
  * *Limit:* the sequencer counts up to 65 535 tokens.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>`, has a watchdog, and compares against arithmetic written
independently in the testbench:

| testbench | what it covers |
|---|---|
| `tb_int4_pe` | signed/unsigned products, 8-bit wrapping accumulation, WHT coefficients, drain chain |
| `tb_int8_pe` | INT8 products over all operand classes, INT4 2 × 2 mode, BF16 product/adder path |
| `tb_bfu` | 3000 random back-to-back BF16 operations against a bit-level model; latency 4, II = 1; INT8 row |
| `tb_bfu_buffer`, `tb_weight_buffer`, `tb_act_buffer` | read/write ports, bank swap protocol, lane-group enables (full sizes) |
| `tb_bfu_tile` | 64-lane BF16 commands with write-back and read-after-write, 5-cycle latency; 4 × 64 INT8 GEMM |
| `tb_pe_array` | INT8/INT4 GEMM, 64- and 128-point WHT, drain order, tile selection (4 tiles) |
| `tb_dequant_unit`, `tb_quant_unit` | conversion, scales, per-token max, approximate-inverse quantization with tolerance |
| `tb_attn_tiling_seq` | command order for N = 1 … 4100 against the loop nest, stall handling, O-write count |
| `tb_versaq3d_top` | full-size end-to-end flow: INT8 GEMM → INT8 quantization, INT4 GEMM → INT4 quantization, WHT pass, BF16 write-back/forward, back to INT8, attention schedule; counts every mechanism |

Simulate with plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal rtl/versaq_pkg.sv rtl/int4_pe.sv rtl/int8_pe.sv \
  rtl/bfu.sv tb/tb_bfu.sv --top-module tb_bfu -o sim && ./obj_dir/sim
```

For the top-level test, list every file in `rtl/` (package first) and `tb/tb_versaq3d_top.sv`.

`tb_versaq3d_top` runs the top with 4 tiles of 16 BFUs each: a 16 × 16 INT8 / 32 × 32 INT4
array, with the buffers at full size. The full 16 × 64-BFU configuration elaborates and lints,
but its Verilator model is too large to build and simulate in a reasonable time, so no
full-size simulation is provided. The largest array simulated is `pe_array` with 4 full tiles:
16 × 64 INT8 / 32 × 128 INT4 PEs. All 64 lanes of a full tile run in `tb_bfu_tile`.
