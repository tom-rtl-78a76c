// tb_ref_pkg: reference arithmetic used by the testbenches, written independently of
// the design's fixed-point code: FP8 E4M3 decoded straight from its definition into a
// real number, and a counter-based check/report helper.
package tb_ref_pkg;

  // value = (-1)^s * 2^(e-7) * (1 + f/8) for e > 0, (-1)^s * 2^-6 * f/8 for e = 0
  function automatic real fp8_real(logic [7:0] x);
    real v;
    int  e, f;
    e = int'(x[6:3]);
    f = int'(x[2:0]);
    if (e == 0) v = (f / 8.0) * (2.0 ** -6);
    else        v = (1.0 + f / 8.0) * (2.0 ** (e - 7));
    return x[7] ? -v : v;
  endfunction

  // random FP8 code, never the all-ones exponent/mantissa pattern
  function automatic logic [7:0] rand_fp8();
    logic [7:0] c;
    c = 8'($urandom);
    if (c[6:0] == 7'h7f) c[0] = 1'b0;
    return c;
  endfunction

  // ternary code to -1 / 0 / +1
  function automatic int tern_val(logic [1:0] t);
    return (t == 2'b01) ? 1 : (t == 2'b10) ? -1 : 0;
  endfunction

endpackage
