// tb_tom_vu: one vector unit (K = 4, N = 2 MVUs, 32-entry buffers, LANE_ID = 1).
// The testbench plays the global controller (issue / busy), the MVU chain (it watches
// the stream and answers with tagged results) and the reduction tree (it returns each
// sent vector doubled, two cycles later). Checks, against values computed here:
//   * VOP add with a negated scalar operand, VOP mul, VOP exp (tolerance);
//   * VRED sum and max into a broadcast scalar;
//   * GRED send order and write-back into buffer 1;
//   * GEMV stream: lane slice (lofs), FP8 data, (i, r, last) tags, one idle cycle per pass
//     when len < N, result placement e = r*N + n, and busy until all results arrived;
//   * KVW beats are marked as cache writes.
module tb_tom_vu;
  import tom_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned K = 4, N = 2, DEPTH = 32, LID = 1;

  logic clk = 0, rst_n;
  logic issue, busy;
  instr_t instr;
  logic s_valid, s_kvw, s_last;
  logic [LEN_W-1:0] s_i;
  logic [ROWS_W-1:0] s_r;
  fp8_t [K-1:0] s_data;
  logic r_valid, r_ready;
  acc_t r_acc;
  logic [MVUID_W-1:0] r_mvu;
  logic [ROWS_W-1:0] r_row;
  logic g_valid, gin_valid;
  logic [ADDR_W-1:0] g_idx, gin_idx;
  vword_t [K-1:0] g_data, gin_data;
  logic h_we, h_buf;
  logic [ADDR_W-1:0] h_addr;
  vword_t [K-1:0] h_wdata, h_rdata;

  tom_vu #(.K(K), .N(N), .DEPTH(DEPTH), .LANE_ID(LID)) dut (.*);

  int checks = 0, failures = 0;
  vword_t b1 [DEPTH][K];
  int beats = 0, gaps = 0, kvw_beats = 0;

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reduction-tree stand-in: returns 2*x two cycles later
  logic g1_v, g2_v; logic [ADDR_W-1:0] g1_i, g2_i; vword_t [K-1:0] g1_d, g2_d;
  always @(posedge clk) begin
    g1_v <= g_valid && rst_n; g1_i <= g_idx; for (int k = 0; k < K; k++) g1_d[k] <= g_data[k] * 2;
    g2_v <= g1_v; g2_i <= g1_i; g2_d <= g1_d;
  end
  assign gin_valid = g2_v; assign gin_idx = g2_i; assign gin_data = g2_d;

  function automatic vword_t q(real v);
    return vword_t'($rtoi(v * 65536.0));
  endfunction

  task automatic hwrite(bit bsel, int a, vword_t [K-1:0] v);
    @(negedge clk); h_we = 1; h_buf = bsel; h_addr = ADDR_W'(a); h_wdata = v;
    @(negedge clk); h_we = 0;
  endtask

  task automatic hread(bit bsel, int a, output vword_t [K-1:0] v);
    h_buf = bsel; h_addr = ADDR_W'(a); #1; v = h_rdata;
  endtask

  task automatic run(instr_t ins);
    @(negedge clk); issue = 1; instr = ins;
    @(negedge clk); issue = 0;
    while (busy) @(negedge clk);
  endtask

  function automatic instr_t mk(opcode_e op, sfu_op_e f, int a, int b, int d, int len);
    instr_t i;
    i = '0; i.op = op; i.sfu = f; i.a = ADDR_W'(a); i.b = ADDR_W'(b); i.d = ADDR_W'(d);
    i.len = LEN_W'(len);
    return i;
  endfunction

  initial begin
    vword_t [K-1:0] v;
    instr_t ins;
    rst_n = 0; issue = 0; instr = '0; h_we = 0; h_buf = 0; h_addr = 0; h_wdata = '0;
    r_valid = 0; r_acc = 0; r_mvu = 0; r_row = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // values exactly representable in FP8: m/8 with |m| <= 15
    for (int a = 0; a < 8; a++) begin
      for (int k = 0; k < K; k++) begin
        b1[a][k] = vword_t'((int'($urandom % 31) - 15) * 8192);
        v[k] = b1[a][k];
      end
      hwrite(1, a, v);
    end
    hread(1, 3, v);
    checks++; if (v[2] !== b1[3][2]) failures++;

    // VOP: buf0[0..3] = buf1[0..3] - buf1[5][0]
    ins = mk(OP_VOP, SFU_ADD, 0, 5, 0, 4); ins.abuf = 1; ins.bbuf = 1; ins.dbuf = 0;
    ins.negb = 1; ins.bscalar = 1;
    run(ins);
    for (int a = 0; a < 4; a++) begin
      hread(0, a, v);
      for (int k = 0; k < K; k++) begin checks++; if (v[k] !== b1[a][k] - b1[5][0]) failures++; end
    end
    // VOP mul: buf0[4..5] = buf1[0..1] * buf1[2..3]
    ins = mk(OP_VOP, SFU_MUL, 0, 2, 4, 2); ins.abuf = 1; ins.bbuf = 1;
    run(ins);
    for (int a = 0; a < 2; a++) begin
      hread(0, 4 + a, v);
      for (int k = 0; k < K; k++) begin
        checks++;
        if (v[k] !== q((real'(b1[a][k]) / 65536.0) * (real'(b1[2 + a][k]) / 65536.0))) failures++;
      end
    end
    // VOP exp of buf1[6] into buf0[6]
    ins = mk(OP_VOP, SFU_EXP, 6, 0, 6, 1); ins.abuf = 1;
    run(ins);
    hread(0, 6, v);
    for (int k = 0; k < K; k++) begin
      real want;
      want = $exp(real'(b1[6][k]) / 65536.0);
      checks++;
      if (real'(v[k]) / 65536.0 - want > want * 2e-4 + 1e-4 ||
          want - real'(v[k]) / 65536.0 > want * 2e-4 + 1e-4) failures++;
    end
    // VRED sum and max of buf1[0..2]
    begin
      longint s; vword_t mx;
      s = 0; mx = b1[0][0];
      for (int a = 0; a < 3; a++) for (int k = 0; k < K; k++) begin
        s += b1[a][k]; if (b1[a][k] > mx) mx = b1[a][k];
      end
      ins = mk(OP_VRED, SFU_ADD, 0, 0, 10, 3); ins.abuf = 1; run(ins);
      ins = mk(OP_VRED, SFU_MAX, 0, 0, 11, 3); ins.abuf = 1; run(ins);
      hread(0, 10, v);
      checks++; if (v[0] !== vword_t'(s) || v[3] !== vword_t'(s)) failures++;
      hread(0, 11, v);
      checks++; if (v[1] !== mx) failures++;
    end
    // GRED of buf0[0..3] -> buf1[20..23] (doubled by the stand-in tree)
    ins = mk(OP_GRED, SFU_ADD, 0, 0, 20, 4);
    run(ins);
    for (int a = 0; a < 4; a++) begin
      hread(1, 20 + a, v);
      checks++; if (v[1] !== 2 * (b1[a][1] - b1[5][0])) failures++;
    end

    // GEMV: len 1 (< N), 3 rows, lane slice a' = 2 + LID*1 = 3; results into buf0 at 12
    ins = mk(OP_GEMV, SFU_ADD, 2, 0, 12, 1); ins.abuf = 1; ins.lofs = 1; ins.rows = 3;
    ins.mode = GM_FFN;
    fork
      run(ins);
      begin : mvus
        // watch the stream: 3 beats, one idle cycle between passes
        int seen; seen = 0;
        while (seen < 3) begin
          @(posedge clk);
          if (s_valid) begin
            checks++;
            if (s_r != ROWS_W'(seen) || s_i != 0 || !s_last || s_kvw) failures++;
            for (int k = 0; k < K; k++) begin
              checks++;
              if (fp8_real(s_data[k]) != real'(b1[3][k]) / 65536.0) failures++;
            end
            seen++; beats++;
          end else if (seen > 0) gaps++;
        end
        // answer with 6 results: row r, MVU n -> value (r*N+n+1) * 4 (Q.18 units = 1 LSB)
        for (int t = 0; t < 6; t++) begin
          @(negedge clk);
          r_valid = 1; r_row = ROWS_W'(t / 2); r_mvu = MVUID_W'(t % 2);
          r_acc = acc_t'((t + 1) * 4);
          @(negedge clk); r_valid = 0;
          checks++; if (!busy && t < 5) failures++;          // still waiting for results
        end
      end
    join
    checks++; if (gaps != 2) begin failures++; $display("gaps %0d", gaps); end
    for (int e = 0; e < 6; e++) begin
      hread(0, 12 + e / K, v);
      checks++; if (v[e % K] !== vword_t'(e + 1)) begin failures++; $display("e %0d = %0d", e, v[e % K]); end
    end
    // KVW: beats marked as writes
    ins = mk(OP_KVW, SFU_ADD, 0, 0, 0, 2); ins.abuf = 1;
    fork
      run(ins);
      repeat (4) begin @(posedge clk); if (s_valid && s_kvw) kvw_beats++; end
    join
    checks++; if (kvw_beats != 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
