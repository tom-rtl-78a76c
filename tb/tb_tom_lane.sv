// tb_tom_lane: one processing lane (K = 16, N = 3 MVUs, 2 layers, 16-word ROM banks).
// The testbench loads activations through the host port, issues instructions as the
// global controller would and checks the vectors the lane leaves in buffer 0:
//   * linear-layer GEMVs with len < N (idle cycles between passes) and len > N, every
//     output against a reference from the ROM weight definition (layer 1 powered);
//   * a cache write into MVU 2 followed by an attention GEMV over it (only MVU 2's
//     output uses the written keys; the others read their never-written words, so only
//     MVU 2 is compared);
//   * the result chain never drops a result (overflow low) and GEMV time is measured.
module tb_tom_lane;
  import tom_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned K = 16, N = 3, LAYERS = 2, ROM_DEPTH = 16, SRAM_DEPTH = 64,
                          VB = 64;

  logic clk = 0, rst_n;
  logic issue, busy, overflow;
  instr_t instr;
  logic [LAYER_W-1:0] layer;
  logic [LAYERS-1:0] pwr_en;
  logic g_valid, gin_valid;
  logic [ADDR_W-1:0] g_idx, gin_idx;
  vword_t [K-1:0] g_data, gin_data;
  logic h_we, h_buf;
  logic [ADDR_W-1:0] h_addr;
  vword_t [K-1:0] h_wdata, h_rdata;

  tom_lane #(.K(K), .N(N), .LAYERS(LAYERS), .ROM_DEPTH(ROM_DEPTH), .SRAM_DEPTH(SRAM_DEPTH),
             .VBUF_DEPTH(VB), .LANE_ID(0)) dut (.*);

  int checks = 0, failures = 0;
  vword_t xb [VB][K];

  always #5 clk = ~clk;
  assign gin_valid = 1'b0; assign gin_idx = '0; assign gin_data = '0;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(instr_t ins, output int cycles);
    @(negedge clk); issue = 1; instr = ins;
    @(negedge clk); issue = 0; cycles = 1;
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  function automatic vword_t q18(real v);   // reference of the Q.18 -> Q16.16 conversion
    longint s;
    s = longint'(v * (2.0 ** 18));
    return vword_t'(s >>> 2);
  endfunction

  task automatic gemv_check(int a, int len, int rows, int wbase, int d);
    instr_t ins; int cyc, w; real want; vword_t [K-1:0] v;
    ins = '0; ins.op = OP_GEMV; ins.mode = GM_FFN; ins.abuf = 1; ins.a = ADDR_W'(a);
    ins.len = LEN_W'(len); ins.rows = ROWS_W'(rows); ins.waddr = WADDR_W'(wbase);
    ins.d = ADDR_W'(d);
    run(ins, cyc);
    $display("GEMV len %0d rows %0d: %0d cycles", len, rows, cyc);
    for (int r = 0; r < rows; r++)
      for (int n = 0; n < N; n++) begin
        want = 0.0;
        for (int i = 0; i < len; i++) begin
          w = wbase + r * len + i;
          for (int k = 0; k < K; k++)
            want += real'(xb[a + i][k]) / 65536.0 *
                    tern_val(rom_weight(rom_seed(n, 1), (w / 4) % ROM_DEPTH, (w % 4) * K + k));
        end
        h_buf = 0; h_addr = ADDR_W'(d + (r * N + n) / K); #1; v = h_rdata;
        checks++;
        if (v[(r * N + n) % K] !== q18(want)) begin
          failures++;
          $display("r %0d n %0d got %0d want %0d", r, n, v[(r * N + n) % K], q18(want));
        end
      end
  endtask

  initial begin
    instr_t ins; int cyc; vword_t [K-1:0] v; real want;
    rst_n = 0; issue = 0; instr = '0; h_we = 0; h_buf = 0; h_addr = 0; h_wdata = '0;
    layer = 1; pwr_en = 2'b10;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 8; a++) begin
      for (int k = 0; k < K; k++) begin
        xb[a][k] = vword_t'((int'($urandom % 31) - 15) * 8192);
        v[k] = xb[a][k];
      end
      @(negedge clk); h_we = 1; h_buf = 1; h_addr = ADDR_W'(a); h_wdata = v;
    end
    @(negedge clk); h_we = 0;

    gemv_check(0, 2, 4, 3, 0);      // len < N
    gemv_check(1, 5, 3, 0, 8);      // len > N

    // cache write of entries 4..5 into MVU 2 at word 30, then attention over it
    ins = '0; ins.op = OP_KVW; ins.abuf = 1; ins.a = 4; ins.len = 2; ins.waddr = 30; ins.mvu = 2;
    run(ins, cyc);
    ins = '0; ins.op = OP_GEMV; ins.mode = GM_ATTN; ins.abuf = 1; ins.a = 6; ins.len = 2;
    ins.rows = 1; ins.waddr = 30; ins.d = 16;
    run(ins, cyc);
    want = 0.0;
    for (int i = 0; i < 2; i++) for (int k = 0; k < K; k++)
      want += real'(xb[6 + i][k]) / 65536.0 * real'(xb[4 + i][k]) / 65536.0;
    h_buf = 0; h_addr = 16; #1; v = h_rdata;
    checks++;
    if (v[2] !== q18(want)) begin failures++; $display("attn got %0d want %0d", v[2], q18(want)); end

    checks++;
    if (overflow) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
