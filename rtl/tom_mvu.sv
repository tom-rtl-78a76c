// tom_mvu: Matrix-Vector Unit, the repeated element of a processing lane.
//
// An MVU holds weight storage next to compute: one sparsity-aware ROM bank per model
// layer (ternary base weights), one SRAM (KV cache and LoRA adapters) and a K-wide
// compute unit (tom_gemv_unit). MVUs of a lane form a chain.
//
// Activation chain ("systolic in"). Each cycle at most one beat arrives from the
// previous MVU (or the VU for MVU 0): K FP8 values plus the chunk index i inside a row
// pass, the output row r, and flags last (final chunk of the row) and kvw (the beat is a
// cache write, not a product). The beat is registered in stage A and that register also
// drives the next MVU, so a beat advances one MVU per cycle.
//
// Stage A: weight-word index w = wbase + r*len + i. In GM_FFN mode the ROM bank of the
//   active layer is read combinationally at row w / SLICES and the K-weight slice
//   w % SLICES is registered (a bank row holds ROM_W/2 weights, SLICES = ROM_W/(2K)
//   chunks). In GM_ATTN and GM_LORA mode the SRAM word w is read (valid next cycle). A
//   kvw beat addressed to this MVU (cfg_mvu == MVU_ID) writes its data to SRAM word
//   wbase + i instead.
// Stage B: the compute unit forms the K products and their sum; the accumulator adds it
//   (restarting at i = 0). On the last chunk the finished sum, tagged with (MVU_ID, r),
//   is pushed into a two-entry result queue. Partial sums never leave the MVU.
//
// Result chain ("systolic out"). Each MVU owns one result slot; the slot drains toward the
// VU through the slots of the MVUs in front of it. When a slot is free it takes, in this
// order, the MVU's own queued result or the result offered by the MVU behind it (which
// otherwise waits). A result that finds the queue full is dropped and flags overflow;
// the stream schedule must keep len >= N (results per cycle <= 1) to avoid it.
//
// In GM_ATTN mode SRAM words are read as K FP8 values (keys, or transposed values). In
// GM_LORA mode the low 2K bits of an SRAM word are K ternary adapter weights.
//
// Follows the source: per-MVU ROM and SRAM, chained activations passing through,
// local accumulation, results sent back on a separate chain, Ternary x FP8 and FP8 x FP8
// sharing one adder tree, LoRA weights kept in the KV SRAM. This design's own choices:
// the two pipeline stages, the address arithmetic, the result tags, queue and priority.
module tom_mvu
  import tom_pkg::*;
#(
  parameter int unsigned K          = 16,
  parameter int unsigned LAYERS     = 30,
  parameter int unsigned ROM_DEPTH  = 64,     // ROM words per layer (see README)
  parameter int unsigned ROM_W      = 128,
  parameter int unsigned SRAM_DEPTH = 15360,
  parameter int unsigned MVU_ID     = 0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // per-instruction configuration, stable while a stream is in flight
  input  gemv_mode_e            cfg_mode,
  input  logic [LAYER_W-1:0]    cfg_layer,
  input  logic [LEN_W-1:0]      cfg_len,
  input  logic [WADDR_W-1:0]    cfg_wbase,
  input  logic [MVUID_W-1:0]    cfg_mvu,
  input  logic [LAYERS-1:0]     pwr_en,
  // activation chain in
  input  logic                  in_valid,
  input  logic                  in_kvw,
  input  logic                  in_last,
  input  logic [LEN_W-1:0]      in_i,
  input  logic [ROWS_W-1:0]     in_r,
  input  fp8_t [K-1:0]          in_data,
  // activation chain out (to the next MVU)
  output logic                  out_valid,
  output logic                  out_kvw,
  output logic                  out_last,
  output logic [LEN_W-1:0]      out_i,
  output logic [ROWS_W-1:0]     out_r,
  output fp8_t [K-1:0]          out_data,
  // result chain: from the MVU behind this one
  input  logic                  rin_valid,
  output logic                  rin_ready,
  input  acc_t                  rin_acc,
  input  logic [MVUID_W-1:0]    rin_mvu,
  input  logic [ROWS_W-1:0]     rin_row,
  // result chain: toward the VU
  output logic                  rout_valid,
  input  logic                  rout_ready,
  output acc_t                  rout_acc,
  output logic [MVUID_W-1:0]    rout_mvu,
  output logic [ROWS_W-1:0]     rout_row,
  output logic                  overflow
);

  localparam int unsigned SLICES = ROM_W / (2 * K);
  localparam int unsigned RAW    = $clog2(ROM_DEPTH);
  localparam int unsigned SAW    = $clog2(SRAM_DEPTH);
  localparam int unsigned SUMW   = PROD_W + $clog2(K);

  // ---------------------------------------------------------------- stage A
  logic              a_valid, a_kvw, a_last;
  logic [LEN_W-1:0]  a_i;
  logic [ROWS_W-1:0] a_r;
  fp8_t [K-1:0]      a_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid <= 1'b0;
      a_kvw   <= 1'b0;
      a_last  <= 1'b0;
      a_i     <= '0;
      a_r     <= '0;
      a_data  <= '0;
    end else begin
      a_valid <= in_valid;
      a_kvw   <= in_kvw;
      a_last  <= in_last;
      a_i     <= in_i;
      a_r     <= in_r;
      a_data  <= in_data;
    end
  end

  assign out_valid = a_valid;
  assign out_kvw   = a_kvw;
  assign out_last  = a_last;
  assign out_i     = a_i;
  assign out_r     = a_r;
  assign out_data  = a_data;

  logic [31:0] widx;
  assign widx = 32'(cfg_wbase) + 32'(a_r) * 32'(cfg_len) + 32'(a_i);

  // ROM banks, one per layer; only the active layer's bank is read.
  logic [ROM_W-1:0] rom_q [LAYERS];
  logic [RAW-1:0]   rom_addr;
  assign rom_addr = RAW'(widx / SLICES);

  for (genvar l = 0; l < LAYERS; l++) begin : g_rom
    tom_rom_bank #(
      .DEPTH (ROM_DEPTH),
      .WIDTH (ROM_W),
      .SEED  (rom_seed(MVU_ID, l))
    ) u_bank (
      .addr   (rom_addr),
      .pwr_en (pwr_en[l]),
      .data   (rom_q[l])
    );
  end

  logic [ROM_W-1:0] rom_row;
  logic [2*K-1:0]   rom_slice;
  always_comb begin
    rom_row   = rom_q[cfg_layer];
    rom_slice = rom_row[(widx % SLICES) * 2 * K +: 2 * K];
  end

  // SRAM: KV cache and LoRA adapters.
  logic            sram_re, sram_we;
  logic [SAW-1:0]  sram_addr;
  logic [8*K-1:0]  sram_q;
  logic            kvw_hit;

  assign kvw_hit   = a_valid && a_kvw && (cfg_mvu == MVUID_W'(MVU_ID));
  assign sram_we   = kvw_hit;
  assign sram_re   = a_valid && !a_kvw && (cfg_mode != GM_FFN);
  assign sram_addr = kvw_hit ? SAW'(32'(cfg_wbase) + 32'(a_i)) : SAW'(widx);

  tom_kv_sram #(
    .DEPTH (SRAM_DEPTH),
    .WIDTH (8 * K)
  ) u_sram (
    .clk   (clk),
    .re    (sram_re),
    .we    (sram_we),
    .addr  (sram_addr),
    .wdata (a_data),
    .rdata (sram_q)
  );

  // ---------------------------------------------------------------- stage B
  logic              b_valid, b_first, b_last;
  logic [ROWS_W-1:0] b_r;
  fp8_t [K-1:0]      b_data;
  logic [2*K-1:0]    b_rom;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_valid <= 1'b0;
      b_first <= 1'b0;
      b_last  <= 1'b0;
      b_r     <= '0;
      b_data  <= '0;
      b_rom   <= '0;
    end else begin
      b_valid <= a_valid && !a_kvw;
      b_first <= (a_i == '0);
      b_last  <= a_last;
      b_r     <= a_r;
      b_data  <= a_data;
      b_rom   <= rom_slice;
    end
  end

  tern_t [K-1:0]     tw;
  fp8_t  [K-1:0]     fw;
  logic signed [SUMW-1:0] dot;

  assign tw = (cfg_mode == GM_LORA) ? sram_q[2*K-1:0] : b_rom;
  assign fw = sram_q;

  tom_gemv_unit #(.K(K)) u_gemv (
    .x       (b_data),
    .tw      (tw),
    .fw      (fw),
    .ternary (cfg_mode != GM_ATTN),
    .sum     (dot)
  );

  acc_t acc, acc_next;
  assign acc_next = (b_first ? acc_t'(0) : acc) + acc_t'(dot);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       acc <= '0;
    else if (b_valid) acc <= acc_next;
  end

  // ---------------------------------------------------------------- result queue (2 entries)
  typedef struct packed {
    acc_t              acc;
    logic [ROWS_W-1:0] row;
  } res_t;

  res_t       q [2];
  logic [1:0] q_cnt;
  logic       push, pop;
  logic       slot_v;
  res_t       slot;
  logic [MVUID_W-1:0] slot_mvu;
  logic       slot_free;

  assign push      = b_valid && b_last;
  assign slot_free = !slot_v || rout_ready;
  assign pop       = slot_free && (q_cnt != 2'd0);
  assign rin_ready = slot_free && (q_cnt == 2'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_cnt    <= '0;
      q[0]     <= '0;
      q[1]     <= '0;
      overflow <= 1'b0;
    end else begin
      // shift out the head on pop, append on push
      if (pop) q[0] <= q[1];
      if (push) begin
        if (q_cnt == 2'd2 && !pop) overflow <= 1'b1;
        else if (pop)              q[1'(q_cnt - 2'd1)] <= '{acc: acc_next, row: b_r};
        else                       q[1'(q_cnt)]        <= '{acc: acc_next, row: b_r};
      end
      q_cnt <= q_cnt + 2'(push && !(q_cnt == 2'd2 && !pop)) - 2'(pop);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_v   <= 1'b0;
      slot     <= '0;
      slot_mvu <= '0;
    end else if (slot_free) begin
      if (q_cnt != 2'd0) begin
        slot_v   <= 1'b1;
        slot     <= q[0];
        slot_mvu <= MVUID_W'(MVU_ID);
      end else if (rin_valid) begin
        slot_v   <= 1'b1;
        slot     <= '{acc: rin_acc, row: rin_row};
        slot_mvu <= rin_mvu;
      end else begin
        slot_v   <= 1'b0;
      end
    end
  end

  assign rout_valid = slot_v;
  assign rout_acc   = slot.acc;
  assign rout_row   = slot.row;
  assign rout_mvu   = slot_mvu;

  // A linear-layer product must only read a powered ROM bank.
  a_rom_powered : assert property (@(posedge clk) disable iff (!rst_n)
    (a_valid && !a_kvw && cfg_mode == GM_FFN) |-> pwr_en[cfg_layer]);

endmodule
