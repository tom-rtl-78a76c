// tom_pkg: types, constants and arithmetic helpers shared by the TOM ternary-ROM
// LLM accelerator.
//
// Number formats
//   * fp8_t   : activations and KV-cache entries, FP8 E4M3 (1 sign, 4 exponent bits with
//               bias 7, 3 mantissa bits, subnormals, no infinity). The source only says
//               "FP8"; E4M3 is this design's choice. The all-ones code S.1111.111 is read as
//               +-480 rather than NaN, so every code is a number.
//   * ternary : 2-bit weight code. 00 = 0, 01 = +1, 10 = -1, as in the published design
//               (-1 is coded 10 rather than 11 so that more stored bits are zero). 11 is
//               unused and read as 0.
//   * products: exact signed fixed point with PROD_FRAC = 18 fraction bits. Every FP8
//               value is exact at 9 fraction bits, so every FP8 x FP8 product is exact at 18;
//               the shared adder tree therefore adds plain integers.
//   * vword_t : vector-unit word, signed Q16.16 (32 bits). Own choice; the source gives
//               no internal format for the vector unit.
//
// The instruction format (instr_t) is this design's own: the source says the global
// controller decodes "high-level instructions" but gives no encoding.
package tom_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned FP8_W     = 8;
  localparam int unsigned PROD_FRAC = 18;            // fraction bits of a product
  localparam int unsigned PROD_W    = 38;            // |product| < 2^37
  localparam int unsigned ACC_W     = 48;            // MVU accumulator width
  localparam int unsigned VW        = 32;            // vector-unit word, Q16.16
  localparam int unsigned VFRAC     = 16;
  localparam int unsigned ADDR_W    = 10;            // vector buffer address
  localparam int unsigned LEN_W     = 10;            // stream length (entries)
  localparam int unsigned ROWS_W    = 12;            // output rows per MVU
  localparam int unsigned WADDR_W   = 16;            // ROM / SRAM word address
  localparam int unsigned LAYER_W   = 5;             // up to 32 layers
  localparam int unsigned MVUID_W   = 4;             // up to 16 MVUs in a lane

  typedef logic [FP8_W-1:0]        fp8_t;
  typedef logic [1:0]              tern_t;
  typedef logic signed [VW-1:0]    vword_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  localparam tern_t TERN_ZERO = 2'b00;
  localparam tern_t TERN_POS  = 2'b01;
  localparam tern_t TERN_NEG  = 2'b10;

  // ---------------------------------------------------------------- instruction set
  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_LAYER = 4'd1,   // set the active layer (drives power gating)
    OP_GEMV  = 4'd2,   // matrix-vector product on every lane
    OP_KVW   = 4'd3,   // write a streamed vector into one MVU's SRAM
    OP_VOP   = 4'd4,   // element-wise SFU operation in every VU
    OP_VRED  = 4'd5,   // reduce a vector inside each lane to a scalar (sum / max)
    OP_GRED  = 4'd6,   // reduce across lanes in the global reduction tree
    OP_HALT  = 4'd15
  } opcode_e;

  // Weight source and multiplier used by a GEMV.
  typedef enum logic [1:0] {
    GM_FFN  = 2'd0,    // ternary weights from ROM   x FP8 activations (linear layers)
    GM_ATTN = 2'd1,    // FP8 K / V^T rows from SRAM x FP8 activations (attention)
    GM_LORA = 2'd2     // ternary adapter weights from SRAM x FP8 activations (LoRA path)
  } gemv_mode_e;

  typedef enum logic [2:0] {
    SFU_ADD  = 3'd0,
    SFU_MUL  = 3'd1,
    SFU_DIV  = 3'd2,
    SFU_EXP  = 3'd3,
    SFU_SQRT = 3'd4,
    SFU_MAX  = 3'd5
  } sfu_op_e;

  // One instruction. Buffer selects: 0 = vector buffer 0 (results), 1 = buffer 1 (inputs).
  typedef struct packed {
    opcode_e              op;
    gemv_mode_e           mode;
    sfu_op_e              sfu;      // VOP operation; VRED/GRED use SFU_ADD (sum) or SFU_MAX
    logic                 negb;     // VOP: negate operand b
    logic                 bscalar;  // VOP: use element 0 of entry b for all elements
    logic                 lofs;     // GEMV/KVW: add lane_id*len to source address a
    logic                 abuf;     // buffer of operand a
    logic                 bbuf;     // buffer of operand b
    logic                 dbuf;     // buffer of the destination
    logic [ADDR_W-1:0]    a;
    logic [ADDR_W-1:0]    b;
    logic [ADDR_W-1:0]    d;
    logic [LEN_W-1:0]     len;      // entries streamed (K elements each)
    logic [ROWS_W-1:0]    rows;     // GEMV: output rows per MVU
    logic [WADDR_W-1:0]   waddr;    // GEMV/KVW: ROM or SRAM word base address
    logic [LAYER_W-1:0]   layer;    // LAYER: new active layer
    logic [MVUID_W-1:0]   mvu;      // KVW: target MVU in every lane
  } instr_t;

  // ---------------------------------------------------------------- FP8 helpers
  // Significand and shift of an E4M3 code: |value| = sig * 2^(sh - 9).
  function automatic logic [3:0] fp8_sig(fp8_t x);
    return (x[6:3] == 4'd0) ? {1'b0, x[2:0]} : {1'b1, x[2:0]};
  endfunction

  function automatic logic [3:0] fp8_sh(fp8_t x);
    return (x[6:3] == 4'd0) ? 4'd0 : x[6:3] - 4'd1;
  endfunction

  // FP8 value as signed fixed point with 9 fraction bits (exact).
  function automatic logic signed [19:0] fp8_to_q9(fp8_t x);
    logic signed [19:0] mag;
    mag = 20'(fp8_sig(x)) << fp8_sh(x);
    return x[7] ? -mag : mag;
  endfunction

  // Q16.16 word to FP8 E4M3, magnitude truncated toward zero, saturating at +-448.
  function automatic fp8_t vword_to_fp8(vword_t v);
    logic [VW-1:0] mag;
    int            p;
    logic [3:0]    e;
    logic [2:0]    f;
    mag = v[VW-1] ? VW'(-v) : VW'(v);
    p = -1;
    for (int i = 0; i < VW; i++) if (mag[i]) p = i;
    if (p < 10) begin                      // below 2^-6: subnormal, units of 2^-9
      e = 4'd0;
      f = 3'(mag >> 7);
    end else if (p > 24) begin             // 2^9 and above: saturate to 448
      e = 4'd15;
      f = 3'd6;
    end else begin
      e = 4'(p - 16 + 7);
      f = 3'(mag >> (p - 3));
      if (e == 4'd15 && f == 3'd7) f = 3'd6;
    end
    if (e == 4'd0 && f == 3'd0) return 8'h00;
    return {v[VW-1], e, f};
  endfunction

  // Accumulator (PROD_FRAC fraction bits) to Q16.16, saturating.
  function automatic vword_t acc_to_vword(acc_t a);
    acc_t s;
    s = a >>> (PROD_FRAC - VFRAC);
    if (s > acc_t'(32'sh7fffffff))  return 32'sh7fffffff;
    if (s < -acc_t'(32'sh7fffffff)) return -32'sh7fffffff;
    return vword_t'(s);
  endfunction

  // ---------------------------------------------------------------- ROM content
  // Weights that the ROM banks are built from. The real chip hard-wires a trained
  // model; with no model available this design synthesises a deterministic pseudo-random
  // ternary matrix per (MVU, layer) so that testbenches can recompute any weight.
  // About 40 % of the weights are zero: sparser than random, less sparse than the over
  // 70 % the source reports for most BitNet layers, so the ROM test sees many one-bits.
  function automatic tern_t rom_weight(int unsigned seed, int unsigned row, int unsigned col);
    logic [31:0] h;
    h = seed * 32'h9E3779B1 ^ row * 32'h85EBCA77 ^ col * 32'hC2B2AE3D;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 13);
    if (h[7:0] < 8'd102) return TERN_ZERO;      // 102/256 ~ 40 %
    return h[8] ? TERN_NEG : TERN_POS;
  endfunction

  function automatic int unsigned rom_seed(int unsigned mvu, int unsigned layer);
    return mvu * 64 + layer + 1;
  endfunction

endpackage
