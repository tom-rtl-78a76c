// tb_tom_reduction_tree: M = 8 lanes, K = 4. Streams of random vectors (one per cycle,
// with gaps) are reduced by sum and by max; each output is compared with the reference
// reduction of the matching input (found by its index), and the latency must be
// log2(M) = 3 cycles.
module tb_tom_reduction_tree;
  import tom_pkg::*;

  localparam int unsigned M = 8, K = 4;

  logic                  clk = 0, rst_n;
  sfu_op_e               op;
  logic                  in_valid, out_valid;
  logic [ADDR_W-1:0]     in_idx, out_idx;
  vword_t [M-1:0][K-1:0] in_data;
  vword_t [K-1:0]        out_data;
  vword_t [K-1:0]        expect_q [1024];
  int                    sent_at  [1024];
  int checks = 0, failures = 0, cyc = 0, outs = 0;

  tom_reduction_tree #(.M(M), .K(K)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    outs++;
    checks += 2;
    if (out_data !== expect_q[out_idx]) begin
      failures++;
      $display("idx %0d mismatch", out_idx);
    end
    if (cyc - sent_at[out_idx] != 3) begin
      failures++;
      $display("idx %0d latency %0d", out_idx, cyc - sent_at[out_idx]);
    end
  end

  initial begin
    longint s;
    vword_t mx;
    rst_n = 0; in_valid = 0; in_idx = 0; in_data = '0; op = SFU_ADD;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      op = pass ? SFU_MAX : SFU_ADD;
      for (int i = 0; i < 200; i++) begin
        @(negedge clk);
        in_valid = ($urandom % 4 != 0);
        in_idx   = ADDR_W'(i + pass * 300);
        for (int m = 0; m < M; m++)
          for (int k = 0; k < K; k++)
            in_data[m][k] = vword_t'($signed($urandom) >>> 4);
        for (int k = 0; k < K; k++) begin
          s = 0; mx = in_data[0][k];
          for (int m = 0; m < M; m++) begin
            s += longint'(in_data[m][k]);
            if (in_data[m][k] > mx) mx = in_data[m][k];
          end
          if (s > 64'sh7fffffff) s = 64'sh7fffffff;
          if (s < -64'sh7fffffff) s = -64'sh7fffffff;
          expect_q[in_idx][k] = pass ? mx : vword_t'(s);
        end
        sent_at[in_idx] = cyc;
      end
      @(negedge clk); in_valid = 0;
      repeat (6) @(negedge clk);
    end
    checks++;
    if (outs < 250) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
