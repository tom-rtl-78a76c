// tb_tom_mvu: one MVU (K = 16, 2 layers, 16-word ROM banks, 64-word SRAM, MVU_ID = 3).
// Drives the activation chain as a VU would and checks:
//   * linear-layer rows (ternary ROM weights of layer 1 x FP8) against a real-valued
//     reference built from the ROM's weight definition;
//   * cache writes (only the beats addressed to MVU 3 land), then attention rows
//     (FP8 x FP8 against the written words) and LoRA rows (ternary codes in SRAM);
//   * the activation chain output equals its input one cycle later;
//   * results from the MVU behind are passed on, and its own results take priority;
//   * no result is dropped (overflow stays low).
module tb_tom_mvu;
  import tom_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned K = 16, LAYERS = 2, ROM_DEPTH = 16, SRAM_DEPTH = 64, ID = 3;

  logic clk = 0, rst_n;
  gemv_mode_e         cfg_mode;
  logic [LAYER_W-1:0] cfg_layer;
  logic [LEN_W-1:0]   cfg_len;
  logic [WADDR_W-1:0] cfg_wbase;
  logic [MVUID_W-1:0] cfg_mvu;
  logic [LAYERS-1:0]  pwr_en;
  logic in_valid, in_kvw, in_last, out_valid, out_kvw, out_last;
  logic [LEN_W-1:0]   in_i, out_i;
  logic [ROWS_W-1:0]  in_r, out_r;
  fp8_t [K-1:0]       in_data, out_data;
  logic rin_valid, rin_ready, rout_valid, rout_ready, overflow;
  acc_t rin_acc, rout_acc;
  logic [MVUID_W-1:0] rin_mvu, rout_mvu;
  logic [ROWS_W-1:0]  rin_row, rout_row;

  tom_mvu #(.K(K), .LAYERS(LAYERS), .ROM_DEPTH(ROM_DEPTH), .SRAM_DEPTH(SRAM_DEPTH),
            .MVU_ID(ID)) dut (.*);

  int checks = 0, failures = 0;
  real  want_row [64];
  int   got_own = 0, got_fwd = 0;
  fp8_t sram_ref [SRAM_DEPTH][K];

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // chain pass-through: out = in of the previous cycle
  logic p_valid; fp8_t [K-1:0] p_data; logic [LEN_W-1:0] p_i;
  always @(posedge clk) begin
    if (rst_n && p_valid) begin
      checks++;
      if (!out_valid || out_data !== p_data || out_i !== p_i) failures++;
    end
    p_valid <= in_valid; p_data <= in_data; p_i <= in_i;
  end

  // result collection
  always @(posedge clk) if (rst_n && rout_valid && rout_ready) begin
    checks++;
    if (rout_mvu == MVUID_W'(ID)) begin
      got_own++;
      if (real'(rout_acc) != want_row[rout_row] * (2.0 ** 18)) begin
        failures++;
        $display("row %0d got %0d want %f", rout_row, rout_acc, want_row[rout_row] * (2.0 ** 18));
      end
    end else begin
      got_fwd++;
      if (rout_acc !== acc_t'(1000 + rout_row)) failures++;
    end
  end

  task automatic stream(gemv_mode_e mode, int len, int rows, int wbase, bit kvw, int tgt,
                        ref fp8_t x [8][K]);
    cfg_mode = mode; cfg_len = LEN_W'(len); cfg_wbase = WADDR_W'(wbase); cfg_mvu = MVUID_W'(tgt);
    for (int r = 0; r < rows; r++)
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        in_valid = 1; in_kvw = kvw; in_i = LEN_W'(i); in_r = ROWS_W'(r);
        in_last = (i == len - 1);
        for (int k = 0; k < K; k++) in_data[k] = x[i][k];
      end
    @(negedge clk);
    in_valid = 0;
    repeat (12) @(negedge clk);
  endtask

  initial begin
    fp8_t x [8][K];
    int   w;
    rst_n = 0; in_valid = 0; in_kvw = 0; in_last = 0; in_i = 0; in_r = 0; in_data = '0;
    rin_valid = 0; rin_acc = 0; rin_mvu = 0; rin_row = 0; rout_ready = 1;
    cfg_layer = 1; pwr_en = 2'b10; cfg_mode = GM_FFN; cfg_len = 1; cfg_wbase = 0; cfg_mvu = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- linear layer: layer 1, len 3, 6 rows, base 5
    for (int i = 0; i < 8; i++) for (int k = 0; k < K; k++) x[i][k] = rand_fp8();
    for (int r = 0; r < 6; r++) begin
      want_row[r] = 0.0;
      for (int i = 0; i < 3; i++) begin
        w = 5 + r * 3 + i;
        for (int k = 0; k < K; k++)
          want_row[r] += fp8_real(x[i][k]) *
                         tern_val(rom_weight(rom_seed(ID, 1), (w / 4) % ROM_DEPTH, (w % 4) * K + k));
      end
    end
    fork
      stream(GM_FFN, 3, 6, 5, 0, 0, x);
      begin  // traffic from the MVU behind, offered while own results appear
        repeat (4) @(negedge clk);
        for (int t = 0; t < 6; t++) begin
          rin_valid = 1; rin_acc = acc_t'(1000 + t); rin_mvu = 4; rin_row = ROWS_W'(t);
          do @(posedge clk); while (!rin_ready);
          @(negedge clk); rin_valid = 0;
        end
      end
    join
    checks++;
    if (got_own != 6 || got_fwd != 6) begin failures++; $display("own %0d fwd %0d", got_own, got_fwd); end

    // ---- cache writes: 4 words to MVU 3 at 10, 4 words to MVU 2 (ignored) at 10
    for (int i = 0; i < 4; i++) for (int k = 0; k < K; k++) begin
      x[i][k] = rand_fp8(); sram_ref[10 + i][k] = x[i][k];
    end
    stream(GM_ATTN, 4, 1, 10, 1, ID, x);
    for (int i = 0; i < 4; i++) for (int k = 0; k < K; k++) x[i][k] = rand_fp8();
    stream(GM_ATTN, 4, 1, 10, 1, 2, x);

    // ---- attention: len 2, 2 rows, base 10 -> words 10..13
    for (int i = 0; i < 2; i++) for (int k = 0; k < K; k++) x[i][k] = rand_fp8();
    for (int r = 0; r < 2; r++) begin
      want_row[r] = 0.0;
      for (int i = 0; i < 2; i++) for (int k = 0; k < K; k++)
        want_row[r] += fp8_real(x[i][k]) * fp8_real(sram_ref[10 + r * 2 + i][k]);
    end
    got_own = 0;
    stream(GM_ATTN, 2, 2, 10, 0, 0, x);
    checks++;
    if (got_own != 2) failures++;

    // ---- LoRA: ternary codes written to words 20..21, then one row of len 2
    for (int i = 0; i < 2; i++) for (int k = 0; k < K; k++) begin
      x[i][k] = (k < 4) ? fp8_t'($urandom) : 8'h00;   // low 32 bits hold 16 ternary codes
      sram_ref[20 + i][k] = x[i][k];
    end
    stream(GM_LORA, 2, 1, 20, 1, ID, x);
    for (int i = 0; i < 2; i++) for (int k = 0; k < K; k++) x[i][k] = rand_fp8();
    want_row[0] = 0.0;
    for (int i = 0; i < 2; i++) for (int k = 0; k < K; k++)
      want_row[0] += fp8_real(x[i][k]) * tern_val(sram_ref[20 + i][k / 4][(k % 4) * 2 +: 2]);
    got_own = 0;
    stream(GM_LORA, 2, 1, 20, 0, 0, x);
    checks++;
    if (got_own != 1) failures++;

    checks++;
    if (overflow) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
