// tom_sfu: the special function unit of a vector unit, K elements wide.
//
// Applies one operation to K pairs of Q16.16 words in the same cycle (combinational):
//   SFU_ADD  y = a + b                 (saturating)
//   SFU_MUL  y = a * b                 (product rounded toward -inf to 16 fraction bits,
//                                       saturating)
//   SFU_DIV  y = a / b                 (quotient truncated toward zero; b = 0 gives the
//                                       largest magnitude with the sign of a)
//   SFU_EXP  y = e^a                   (e^a = 2^(a*log2 e): integer part as a shift, the
//                                       fractional part by the cubic
//                                       2^f ~ 1 + 0.6960656 f + 0.2244943 f^2 + 0.0794402 f^3,
//                                       relative error below 1e-4; saturating)
//   SFU_SQRT y = sqrt(a)               (digit-by-digit integer square root of a * 2^16,
//                                       truncated; a <= 0 gives 0)
//   SFU_MAX  y = max(a, b)
// b is ignored by EXP and SQRT.
//
// The operation list (DIV, ADD, EXP, MUL, SQRT, MAX) is the one the source prints in its
// vector unit; the source builds these from a vendor component library in floating point.
// The fixed-point format and every algorithm above are this design's own.
module tom_sfu
  import tom_pkg::*;
#(
  parameter int unsigned K = 16
) (
  input  sfu_op_e        op,
  input  vword_t [K-1:0] a,
  input  vword_t [K-1:0] b,
  output vword_t [K-1:0] y
);

  localparam logic signed [63:0] VMAX = 64'sh7fffffff;

  function automatic vword_t sat(logic signed [63:0] v);
    if (v > VMAX)  return vword_t'(VMAX);
    if (v < -VMAX) return vword_t'(-VMAX);
    return vword_t'(v);
  endfunction

  function automatic vword_t f_exp(vword_t x);
    logic signed [63:0] t, n;
    logic [15:0]        f;
    logic [63:0]        p, f1, f2, f3;
    t  = (64'(x) * 64'sd94548) >>> 16;          // x * log2(e), Q16.16
    n  = t >>> 16;                              // floor
    f  = t[15:0];
    f1 = 64'(f);
    f2 = (f1 * f1) >> 16;
    f3 = (f2 * f1) >> 16;
    p  = 64'd65536 + ((f1 * 64'd45617 + f2 * 64'd14712 + f3 * 64'd5206) >> 16);
    if (n >= 15)  return vword_t'(VMAX);
    if (n < -32)  return '0;
    if (n >= 0)   return sat($signed(p << n));
    return vword_t'(p >> (-n));
  endfunction

  function automatic vword_t f_sqrt(vword_t x);
    logic [47:0] v, rem, root, trial;
    if (x <= 0) return '0;
    v    = 48'(x) << 16;
    rem  = '0;
    root = '0;
    for (int i = 23; i >= 0; i--) begin
      rem   = (rem << 2) | 48'((v >> (2 * i)) & 48'd3);
      trial = (root << 2) | 48'd1;
      root  = root << 1;
      if (rem >= trial) begin
        rem  = rem - trial;
        root = root | 48'd1;
      end
    end
    return vword_t'(root);
  endfunction

  function automatic vword_t f_div(vword_t x, vword_t d);
    logic signed [63:0] num;
    if (d == 0) return x[VW-1] ? vword_t'(-VMAX) : vword_t'(VMAX);
    num = 64'(x) <<< 16;
    return sat(num / 64'(d));
  endfunction

  always_comb begin
    for (int i = 0; i < K; i++) begin
      case (op)
        SFU_ADD:  y[i] = sat(64'(a[i]) + 64'(b[i]));
        SFU_MUL:  y[i] = sat((64'(a[i]) * 64'(b[i])) >>> 16);
        SFU_DIV:  y[i] = f_div(a[i], b[i]);
        SFU_EXP:  y[i] = f_exp(a[i]);
        SFU_SQRT: y[i] = f_sqrt(a[i]);
        SFU_MAX:  y[i] = (a[i] > b[i]) ? a[i] : b[i];
        default:  y[i] = a[i];
      endcase
    end
  end

endmodule
