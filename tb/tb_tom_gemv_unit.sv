// tb_tom_gemv_unit: random K = 16 dot products in both multiplier modes, compared with
// the exact sum computed in real arithmetic from the FP8 definition (all products and
// sums are exact in double precision), scaled by 2^18.
module tb_tom_gemv_unit;
  import tom_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned K = 16;

  fp8_t [K-1:0]  x, fw;
  tern_t [K-1:0] tw;
  logic          ternary;
  logic signed [PROD_W+$clog2(K)-1:0] sum;
  int checks = 0, failures = 0;

  tom_gemv_unit #(.K(K)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ref_sum;
    for (int t = 0; t < 4000; t++) begin
      ternary = t[0];
      ref_sum = 0.0;
      for (int k = 0; k < K; k++) begin
        x[k]  = rand_fp8();
        fw[k] = rand_fp8();
        tw[k] = 2'($urandom);
        if (ternary) ref_sum += fp8_real(x[k]) * tern_val(tw[k]);
        else         ref_sum += fp8_real(x[k]) * fp8_real(fw[k]);
      end
      #1;
      checks++;
      if (real'(sum) != ref_sum * (2.0 ** 18)) begin
        failures++;
        if (failures < 10) $display("t=%0d tern=%0d got %0d want %f", t, ternary, sum, ref_sum * (2.0 ** 18));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
