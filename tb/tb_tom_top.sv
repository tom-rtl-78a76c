// tb_tom_top: end-to-end run of the accelerator at reduced size (M = 4 lanes, N = 3
// MVUs, K = 16, 3 layers). One program exercises every mechanism of the design:
//   1. LAYER 0 then a linear layer at once: the GEMV waits for the ROM banks to wake.
//      Each lane multiplies its slice of the 128-element input by its ternary ROM
//      weights; the global reduction tree sums the partial outputs (linear-layer
//      dataflow, input dimension tiled across lanes).
//   2. LAYER 1 (already powered up during layer 0, so no wait) and a second linear layer.
//   3. LoRA two-path execution: ternary adapters A (each lane holds the part for its
//      input slice) and B are written into the SRAMs (cache-write instruction), A.x runs on every lane and is reduced, B.(A.x) runs,
//      and the VU adds the adapter path to the base path.
//   4. Attention over 24 cached tokens (6 per lane): keys and transposed values are
//      written into the SRAMs, then step 0 scores and local max, step 1 global max,
//      step 2 rescaling with exp, step 3 P.V per lane, step 4 global sum, and the
//      normalisation by the global sum of the weights.
// Results are read back through the host port and compared with references computed
// here in real arithmetic (exact where the data path is exact, with a tolerance where
// values pass through FP8). Every mechanism is counted and must occur at least once.
module tb_tom_top;
  import tom_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned M = 4, N = 3, K = 16, LAYERS = 3, ROM_DEPTH = 16,
                          SRAM_DEPTH = 256, VB = 64, IMEM = 64, WAKE = 4;
  localparam int unsigned L = 2;                       // entries per lane slice

  logic clk = 0, rst_n;
  logic p_we, start, busy, done, h_we, h_buf, overflow;
  logic [5:0] p_addr;
  instr_t p_data;
  logic [1:0] h_lane;
  logic [ADDR_W-1:0] h_addr;
  vword_t [K-1:0] h_wdata, h_rdata;
  logic [LAYER_W-1:0] layer;
  logic [LAYERS-1:0] pwr_en;
  logic [31:0] pg_stall_cycles, layer_switches;

  tom_top #(.M(M), .N(N), .K(K), .LAYERS(LAYERS), .ROM_DEPTH(ROM_DEPTH),
            .SRAM_DEPTH(SRAM_DEPTH), .VBUF_DEPTH(VB), .IMEM_DEPTH(IMEM), .WAKE(WAKE)) dut (.*);

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- mechanism counters
  int c_issue [16];
  int c_gemv_mode [4];
  int c_gred_op [8];
  int c_vop [8];
  int c_gap = 0;
  always @(posedge clk) if (rst_n && dut.issue) begin
    c_issue[dut.instr.op]++;
    if (dut.instr.op == OP_GEMV) c_gemv_mode[dut.instr.mode]++;
    if (dut.instr.op == OP_GRED) c_gred_op[dut.instr.sfu]++;
    if (dut.instr.op == OP_VOP)  c_vop[dut.instr.sfu]++;
  end
  always @(posedge clk) if (rst_n && dut.g_lane[0].u_lane.u_vu.state == 3'd2) c_gap++;

  // ---------------------------------------------------------------- helpers
  instr_t prog [IMEM];
  int     np = 0;

  function automatic instr_t I(opcode_e op);
    instr_t i; i = '0; i.op = op; return i;
  endfunction
  function automatic instr_t gemv(gemv_mode_e md, int a, int len, int rows, int wb, int d, bit lofs);
    instr_t i; i = I(OP_GEMV); i.mode = md; i.abuf = 1; i.dbuf = 0; i.a = ADDR_W'(a);
    i.len = LEN_W'(len); i.rows = ROWS_W'(rows); i.waddr = WADDR_W'(wb); i.d = ADDR_W'(d);
    i.lofs = lofs; return i;
  endfunction
  function automatic instr_t kvw(bit ab, int a, int len, int wb, int mvu);
    instr_t i; i = I(OP_KVW); i.abuf = ab; i.a = ADDR_W'(a); i.len = LEN_W'(len);
    i.waddr = WADDR_W'(wb); i.mvu = MVUID_W'(mvu); return i;
  endfunction
  function automatic instr_t gred(sfu_op_e f, int a, int len, int d);
    instr_t i; i = I(OP_GRED); i.sfu = f; i.a = ADDR_W'(a); i.len = LEN_W'(len);
    i.d = ADDR_W'(d); return i;
  endfunction
  function automatic instr_t vop(sfu_op_e f, bit ab, int a, bit bb, int b, bit db, int d,
                                 bit negb, bit bsc);
    instr_t i; i = I(OP_VOP); i.sfu = f; i.abuf = ab; i.a = ADDR_W'(a); i.bbuf = bb;
    i.b = ADDR_W'(b); i.dbuf = db; i.d = ADDR_W'(d); i.len = 1; i.negb = negb;
    i.bscalar = bsc; return i;
  endfunction
  function automatic instr_t vred(sfu_op_e f, bit ab, int a, int d);
    instr_t i; i = I(OP_VRED); i.sfu = f; i.abuf = ab; i.a = ADDR_W'(a); i.len = 1;
    i.dbuf = 0; i.d = ADDR_W'(d); return i;
  endfunction
  function automatic instr_t lay(int l);
    instr_t i; i = I(OP_LAYER); i.layer = LAYER_W'(l); return i;
  endfunction

  task automatic hw(int lane, bit b, int a, vword_t [K-1:0] v);
    @(negedge clk); h_we = 1; h_lane = 2'(lane); h_buf = b; h_addr = ADDR_W'(a); h_wdata = v;
    @(negedge clk); h_we = 0;
  endtask
  task automatic hr(int lane, bit b, int a, output vword_t [K-1:0] v);
    h_lane = 2'(lane); h_buf = b; h_addr = ADDR_W'(a); #1; v = h_rdata;
  endtask

  function automatic real tol_check(real got, real want, real tol);
    return (got - want > tol || want - got > tol) ? 1.0 : 0.0;
  endfunction

  // FP8-exact Q16.16 value of an FP8 code
  function automatic vword_t q_of(fp8_t c);
    return vword_t'($rtoi(fp8_real(c) * 65536.0));
  endfunction
  function automatic fp8_t rand_fp8_small();         // |v| in [2^-3, 2)
    fp8_t c;
    c = {1'($urandom), 4'(4 + $urandom % 4), 3'($urandom)};
    return c;
  endfunction
  function automatic fp8_t tern_byte();              // four ternary codes, not -0
    logic [7:0] b;
    do begin
      for (int t = 0; t < 4; t++) b[2*t +: 2] = 2'($urandom % 3);
    end while (b == 8'h80);
    return b;
  endfunction

  // ---------------------------------------------------------------- data
  vword_t x [M*L][K];                 // input vector, held by every lane
  fp8_t   lA [N][L*M][K];             // LoRA A codes per MVU, word = chunk (same in all lanes)
  fp8_t   lB [N][2][K];               // LoRA B codes per MVU, rows 0..1, len 1
  fp8_t   key [M][N][2][2][K];        // lane, MVU, token row r, chunk i
  fp8_t   vt  [M][N][2][K];           // lane, MVU, dim row r, token k (k < 6)
  fp8_t   q   [2][K];

  real y0 [N*2], y1 [N*2];

  initial begin
    vword_t [K-1:0] v;
    real want, got, s;
    int  w;
    rst_n = 0; p_we = 0; p_addr = 0; p_data = '0; start = 0;
    h_we = 0; h_lane = 0; h_buf = 0; h_addr = 0; h_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- input vector: values m/8, exact in FP8
    for (int a = 0; a < M * L; a++) for (int k = 0; k < K; k++)
      x[a][k] = vword_t'((int'($urandom % 31) - 15) * 8192);
    for (int m = 0; m < M; m++) for (int a = 0; a < M * L; a++) begin
      for (int k = 0; k < K; k++) v[k] = x[a][k];
      hw(m, 1, a, v);
    end
    // ---- LoRA adapters, written through buffer 1 entries 30.. (same in every lane)
    for (int n = 0; n < N; n++) begin
      for (int c = 0; c < L * M; c++) for (int k = 0; k < K; k++) lA[n][c][k] = (k < 4) ? tern_byte() : 8'h00;
      for (int r = 0; r < 2; r++) for (int k = 0; k < K; k++) lB[n][r][k] = 8'h00;
      // B only has codes for the N elements of A.x that are defined
      for (int r = 0; r < 2; r++) for (int j = 0; j < N; j++) lB[n][r][j / 4][(j % 4) * 2 +: 2] = 2'($urandom % 3);
    end
    // ---- keys, transposed values, query
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
      for (int r = 0; r < 2; r++) for (int i = 0; i < 2; i++) for (int k = 0; k < K; k++)
        key[m][n][r][i][k] = rand_fp8_small();
      for (int r = 0; r < 2; r++) for (int k = 0; k < K; k++)
        vt[m][n][r][k] = (k < N * 2) ? rand_fp8_small() : 8'h00;
    end
    for (int i = 0; i < 2; i++) for (int k = 0; k < K; k++) q[i][k] = rand_fp8_small();
    // scale the query down so that scores stay in a moderate range
    for (int i = 0; i < 2; i++) for (int k = 0; k < K; k++) q[i][k][6:3] = q[i][k][6:3] - 4'd3;

    for (int m = 0; m < M; m++) begin
      for (int n = 0; n < N; n++) begin
        for (int i = 0; i < L; i++) begin               // lane m holds A for its input slice
          for (int k = 0; k < K; k++) v[k] = q_of(lA[n][m * L + i][k]);
          hw(m, 1, 30 + n * 8 + i, v);                 // A of MVU n: entries 30+8n ..
        end
        for (int r = 0; r < 2; r++) begin
          for (int k = 0; k < K; k++) v[k] = q_of(lB[n][r][k]);
          hw(m, 1, 54 + n * 2 + r, v);                 // B of MVU n: entries 54+2n ..
        end
        for (int r = 0; r < 2; r++) for (int i = 0; i < 2; i++) begin
          for (int k = 0; k < K; k++) v[k] = q_of(key[m][n][r][i][k]);
          hw(m, 1, 8 + n * 4 + r * 2 + i, v);          // keys of MVU n: entries 8+4n ..
        end
        for (int r = 0; r < 2; r++) begin
          for (int k = 0; k < K; k++) v[k] = q_of(vt[m][n][r][k]);
          hw(m, 0, 40 + n * 2 + r, v);                 // V^T of MVU n: buffer 0, 40+2n ..
        end
      end
      for (int i = 0; i < 2; i++) begin
        for (int k = 0; k < K; k++) v[k] = q_of(q[i][k]);
        hw(m, 1, 20 + i, v);                           // query: entries 20..21
      end
      for (int k = 0; k < K; k++) v[k] = -32'sh40000000;
      hw(m, 0, 8, v);                                  // score entry pre-filled very negative
    end

    // ---------------------------------------------------------------- program
    prog[np++] = lay(0);
    prog[np++] = gemv(GM_FFN, 0, L, 2, 0, 0, 1);       // 1: base path layer 0 -> buf0[0]
    prog[np++] = gred(SFU_ADD, 0, 1, 22);              //    Y0 -> buf1[22]
    prog[np++] = lay(1);
    prog[np++] = gemv(GM_FFN, 0, L, 2, 0, 1, 1);       // 2: layer 1 -> buf0[1]
    prog[np++] = gred(SFU_ADD, 1, 1, 23);              //    Y1 -> buf1[23]
    // 3: LoRA. A (8 words per MVU) to SRAM 100.., B (2 words) to SRAM 120..
    for (int n = 0; n < N; n++) prog[np++] = kvw(1, 30 + n * 8, L, 100, n);
    for (int n = 0; n < N; n++) prog[np++] = kvw(1, 54 + n * 2, 2, 120, n);
    prog[np++] = gemv(GM_LORA, 0, L, 1, 100, 2, 1);    //    A.x partial (lane slice) -> buf0[2]
    prog[np++] = gred(SFU_ADD, 2, 1, 24);              //    A.x -> buf1[24]
    prog[np++] = gemv(GM_LORA, 24, 1, 2, 120, 3, 0);   //    B.(A.x) -> buf0[3]
    prog[np++] = vop(SFU_ADD, 1, 23, 0, 3, 0, 4, 0, 0);//    h = Y1 + h_lora -> buf0[4]
    // 4: attention. keys to SRAM 0.. (2 tokens x 2 chunks per MVU), V^T to SRAM 10..
    for (int n = 0; n < N; n++) prog[np++] = kvw(1, 8 + n * 4, 4, 0, n);
    for (int n = 0; n < N; n++) prog[np++] = kvw(0, 40 + n * 2, 2, 10, n);
    prog[np++] = gemv(GM_ATTN, 20, 2, 2, 0, 8, 0);     //    step 0: scores -> buf0[8]
    prog[np++] = vred(SFU_MAX, 0, 8, 9);               //            local max -> buf0[9]
    prog[np++] = gred(SFU_MAX, 9, 1, 25);              //    step 1: global max -> buf1[25]
    prog[np++] = vop(SFU_ADD, 0, 8, 1, 25, 0, 10, 1, 1); // step 2: s - max -> buf0[10]
    prog[np++] = vop(SFU_EXP, 0, 10, 0, 0, 1, 26, 0, 0); //         p = exp -> buf1[26]
    prog[np++] = gemv(GM_ATTN, 26, 1, 2, 10, 11, 0);   //    step 3: P.V -> buf0[11]
    prog[np++] = gred(SFU_ADD, 11, 1, 27);             //    step 4: O (unnormalised) -> buf1[27]
    prog[np++] = vred(SFU_ADD, 1, 26, 12);             //    local sum of p -> buf0[12]
    prog[np++] = gred(SFU_ADD, 12, 1, 28);             //    global sum -> buf1[28]
    prog[np++] = vop(SFU_DIV, 1, 27, 1, 28, 0, 13, 0, 1); // O / sum -> buf0[13]
    prog[np++] = I(OP_HALT);

    for (int a = 0; a < np; a++) begin
      @(negedge clk); p_we = 1; p_addr = 6'(a); p_data = prog[a];
    end
    @(negedge clk); p_we = 0; start = 1;
    @(negedge clk); start = 0;
    begin
      int cyc; cyc = 0;
      while (!done) begin @(negedge clk); cyc++; end
      $display("program: %0d instructions, %0d cycles", np, cyc);
    end

    // ---------------------------------------------------------------- checks
    // 1/2: linear layers, exact
    for (int e = 0; e < N * 2; e++) begin
      int n, r; n = e % N; r = e / N;
      y0[e] = 0.0; y1[e] = 0.0;
      for (int m = 0; m < M; m++) for (int i = 0; i < L; i++) begin
        w = r * L + i;
        for (int k = 0; k < K; k++) begin
          y0[e] += real'(x[m * L + i][k]) / 65536.0 * tern_val(rom_weight(rom_seed(n, 0), w / 4, (w % 4) * K + k));
          y1[e] += real'(x[m * L + i][k]) / 65536.0 * tern_val(rom_weight(rom_seed(n, 1), w / 4, (w % 4) * K + k));
        end
      end
      for (int m = 0; m < M; m++) begin
        hr(m, 1, 22, v); checks++;
        if (real'(v[e]) / 65536.0 != y0[e]) begin failures++; $display("Y0[%0d] lane %0d got %f want %f", e, m, real'(v[e]) / 65536.0, y0[e]); end
        hr(m, 1, 23, v); checks++;
        if (real'(v[e]) / 65536.0 != y1[e]) begin failures++; $display("Y1[%0d] got %f want %f", e, real'(v[e]) / 65536.0, y1[e]); end
      end
    end
    // 3: LoRA, h = Y1 + B.(A.x); A.x passes through FP8 (truncation, < 1/8 relative)
    begin
      real ax [N], hl, tol;
      for (int n = 0; n < N; n++) begin
        ax[n] = 0.0;
        for (int m = 0; m < M; m++) for (int i = 0; i < L; i++) for (int k = 0; k < K; k++)
          ax[n] += real'(x[m * L + i][k]) / 65536.0 * tern_val(lA[n][m * L + i][k / 4][(k % 4) * 2 +: 2]);
      end
      hr(0, 1, 24, v);
      for (int n = 0; n < N; n++) begin
        checks++;
        if (real'(v[n]) / 65536.0 != ax[n]) begin failures++; $display("Ax[%0d] got %f want %f", n, real'(v[n]) / 65536.0, ax[n]); end
      end
      for (int e = 0; e < N * 2; e++) begin
        int n, r; n = e % N; r = e / N;
        hl = 0.0; tol = 1e-3;
        for (int j = 0; j < N; j++) begin
          hl  += ax[j] * tern_val(lB[n][r][j / 4][(j % 4) * 2 +: 2]);
          tol += (ax[j] < 0 ? -ax[j] : ax[j]) * 0.125;
        end
        hr(2, 0, 4, v);
        got = real'(v[e]) / 65536.0;
        checks++;
        if (tol_check(got, y1[e] + hl, tol) != 0.0) begin failures++; $display("h[%0d] got %f want %f", e, got, y1[e] + hl); end
      end
    end
    // 4: attention output O[d], d = r*N + n, over all 24 tokens
    begin
      real sc [M][N*2], mx, p [M][N*2], den, o;
      mx = -1e9;
      for (int m = 0; m < M; m++) for (int t = 0; t < N * 2; t++) begin
        int n, r; n = t % N; r = t / N;
        sc[m][t] = 0.0;
        for (int i = 0; i < 2; i++) for (int k = 0; k < K; k++)
          sc[m][t] += fp8_real(q[i][k]) * fp8_real(key[m][n][r][i][k]);
        if (sc[m][t] > mx) mx = sc[m][t];
      end
      hr(1, 1, 25, v);
      checks++;
      if (tol_check(real'(v[0]) / 65536.0, mx, 1e-4) != 0.0) begin failures++; $display("max got %f want %f", real'(v[0]) / 65536.0, mx); end
      den = 0.0;
      for (int m = 0; m < M; m++) for (int t = 0; t < N * 2; t++) begin
        p[m][t] = $exp(sc[m][t] - mx); den += p[m][t];
      end
      for (int d = 0; d < N * 2; d++) begin
        int n, r; n = d % N; r = d / N;
        o = 0.0;
        for (int m = 0; m < M; m++) for (int t = 0; t < N * 2; t++)
          o += p[m][t] * fp8_real(vt[m][n][r][t]);
        o = o / den;
        hr(3, 0, 13, v);
        got = real'(v[d]) / 65536.0;
        checks++;
        // p passes through FP8 on its way into the MVUs: allow 1/8 relative error
        if (tol_check(got, o, 0.15 * (o < 0 ? -o : o) + 0.02) != 0.0) begin
          failures++; $display("O[%0d] got %f want %f", d, got, o);
        end
      end
    end

    // ---- mechanisms
    checks++; if (pg_stall_cycles == 0) begin failures++; $display("no power-up wait"); end
    checks++; if (layer_switches != 2) failures++;
    checks++; if (pwr_en != 3'b110) failures++;         // layer 1 and its successor
    checks++; if (overflow) failures++;
    checks++; if (c_gap == 0) failures++;
    foreach (c_gemv_mode[i]) if (i < 3) begin checks++; if (c_gemv_mode[i] == 0) failures++; end
    checks++; if (c_issue[OP_KVW] == 0 || c_issue[OP_VRED] == 0) failures++;
    checks++; if (c_gred_op[SFU_ADD] == 0 || c_gred_op[SFU_MAX] == 0) failures++;
    checks++; if (c_vop[SFU_ADD] == 0 || c_vop[SFU_EXP] == 0 || c_vop[SFU_DIV] == 0) failures++;
    $display("mechanisms: power-up wait %0d cycles, layer switches %0d, FFN/ATTN/LoRA GEMVs %0d/%0d/%0d, cache writes %0d, in-lane reductions %0d, tree sum/max %0d/%0d, pass gaps %0d",
             pg_stall_cycles, layer_switches, c_gemv_mode[0], c_gemv_mode[1], c_gemv_mode[2],
             c_issue[OP_KVW], c_issue[OP_VRED], c_gred_op[SFU_ADD], c_gred_op[SFU_MAX], c_gap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
