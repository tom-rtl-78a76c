// tb_tom_sfu: every SFU operation on random Q16.16 operands, compared with real-valued
// reference results: ADD, MAX exact; MUL and DIV within one unit in the last place
// (rounding); EXP within 2e-4 relative plus 2^-14 absolute; SQRT within 2^-15.
module tb_tom_sfu;
  import tom_pkg::*;

  localparam int unsigned K = 4;

  sfu_op_e        op;
  vword_t [K-1:0] a, b, y;
  int checks = 0, failures = 0;

  tom_sfu #(.K(K)) dut (.*);

  function automatic real q2r(vword_t v);
    return real'(v) / 65536.0;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ra, rb, ry, want, tol;
    for (int t = 0; t < 3000; t++) begin
      op = sfu_op_e'(t % 6);
      for (int k = 0; k < K; k++) begin
        a[k] = vword_t'($signed($urandom) >>> ($urandom % 16 + 8));   // about +-2^15 .. +-2^7
        b[k] = vword_t'($signed($urandom) >>> ($urandom % 16 + 8));
        if (op == SFU_EXP) a[k] = vword_t'($signed($urandom) >>> 13); // about +-2^2 .. 
        if (b[k] == 0) b[k] = 1;
      end
      #1;
      for (int k = 0; k < K; k++) begin
        ra = q2r(a[k]); rb = q2r(b[k]); ry = q2r(y[k]);
        case (op)
          SFU_ADD:  begin want = ra + rb; tol = 0.0; end
          SFU_MUL:  begin want = ra * rb; tol = 1.0 / 65536; end
          SFU_DIV:  begin want = ra / rb; tol = 1.0 / 65536; end
          SFU_EXP:  begin want = $exp(ra); tol = want * 2e-4 + 1.0 / 16384; end
          SFU_SQRT: begin want = (ra > 0) ? $sqrt(ra) : 0.0; tol = 1.0 / 32768; end
          default:  begin want = (ra > rb) ? ra : rb; tol = 0.0; end
        endcase
        if (want > 32767.0 || want < -32767.0) continue;     // saturating range not compared
        checks++;
        if (ry - want > tol || want - ry > tol) begin
          failures++;
          if (failures < 10) $display("op %s a=%f b=%f got %f want %f", op.name(), ra, rb, ry, want);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
