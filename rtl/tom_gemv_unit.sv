// tom_gemv_unit: the compute unit of an MVU, a K-wide dot product.
//
// Each cycle it forms K products and adds them in one adder tree. Two kinds of
// multiplier share that tree, as in the published design:
//   * Ternary x FP8 (ternary = 1): the product is the activation, its negation or zero,
//     chosen by the 2-bit weight code (a conditional negation, no multiplier). Used by
//     linear layers (weights from ROM) and by LoRA adapters (weights from SRAM).
//   * FP8 x FP8 (ternary = 0): a 4x4-bit significand product shifted by the sum of the
//     exponents. Used by attention (Q.K and P.V with K/V from the KV cache).
// Both products are exact signed integers at PROD_FRAC = 18 fraction bits, so the
// adder tree is a plain integer tree of depth log2(K); the sum is exact.
//
// Interface: x = K FP8 activations, tw = K ternary codes, fw = K FP8 weights, ternary
// selects the multiplier. sum is combinational (the MVU registers around it).
module tom_gemv_unit
  import tom_pkg::*;
#(
  parameter int unsigned K = 16
) (
  input  fp8_t [K-1:0]                       x,
  input  tern_t [K-1:0]                      tw,
  input  fp8_t [K-1:0]                       fw,
  input  logic                               ternary,
  output logic signed [PROD_W+$clog2(K)-1:0] sum
);

  localparam int unsigned SW = PROD_W + $clog2(K);

  logic signed [PROD_W-1:0] prod [K];

  always_comb begin
    for (int i = 0; i < K; i++) begin
      logic signed [PROD_W-1:0] tprod, fprod;
      logic [7:0]               sig;
      // Ternary x FP8: conditional negation of the activation, aligned to 18 bits.
      tprod = PROD_W'(fp8_to_q9(x[i])) <<< (PROD_FRAC - 9);
      case (tw[i])
        TERN_POS: tprod = tprod;
        TERN_NEG: tprod = -tprod;
        default:  tprod = '0;
      endcase
      // FP8 x FP8: significand product, shifted by the exponent sum.
      sig   = fp8_sig(x[i]) * fp8_sig(fw[i]);
      fprod = PROD_W'(sig) << (5'(fp8_sh(x[i])) + 5'(fp8_sh(fw[i])));
      if (x[i][7] ^ fw[i][7]) fprod = -fprod;
      prod[i] = ternary ? tprod : fprod;
    end
  end

  // Shared adder tree.
  always_comb begin
    logic signed [SW-1:0] acc;
    acc = '0;
    for (int i = 0; i < K; i++) acc += SW'(prod[i]);
    sum = acc;
  end

endmodule
