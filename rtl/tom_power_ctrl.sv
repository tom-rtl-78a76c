// tom_power_ctrl: workload-aware dynamic power gating of the per-layer ROM banks.
//
// The model runs layer after layer, so the controller knows which layer's weights are
// needed now and which next. While layer L is active, the ROM banks of L and of L+1
// are powered (L+1 is "powering up" so that it is ready when the program moves on) and
// every other layer's banks are switched off. Layer LAYERS-1 is followed by layer 0 of
// the next token, so its successor is layer 0.
//
// A bank that is switched on needs WAKE cycles before its outputs are valid; ready[l]
// goes high WAKE cycles after pwr_en[l] rose and drops with pwr_en[l]. A layer change
// (set pulse with layer) takes effect on the next clock edge. After reset no layer is
// active and all banks are off until the first set.
//
// From the source: power only to the active layer's banks, the next layer powered up
// while the current one computes (its layer-by-layer figure), the rest gated off.
// WAKE is this design's figure; the source says only that wake-up is almost
// instantaneous.
module tom_power_ctrl
  import tom_pkg::*;
#(
  parameter int unsigned LAYERS = 30,
  parameter int unsigned WAKE   = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               set,
  input  logic [LAYER_W-1:0] layer,
  output logic [LAYERS-1:0]  pwr_en,
  output logic [LAYERS-1:0]  ready
);

  localparam int unsigned CW = $clog2(WAKE + 1);

  logic               active;
  logic [LAYER_W-1:0] cur;
  logic [CW-1:0]      wake_cnt [LAYERS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      cur    <= '0;
    end else if (set) begin
      active <= 1'b1;
      cur    <= layer;
    end
  end

  always_comb begin
    pwr_en = '0;
    if (active) begin
      pwr_en[cur] = 1'b1;
      if (32'(cur) + 1 < LAYERS) pwr_en[cur + LAYER_W'(1)] = 1'b1;
      else                       pwr_en[0]                 = 1'b1;
    end
  end

  for (genvar l = 0; l < LAYERS; l++) begin : g_wake
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                      wake_cnt[l] <= '0;
      else if (!pwr_en[l])             wake_cnt[l] <= '0;
      else if (wake_cnt[l] != CW'(WAKE)) wake_cnt[l] <= wake_cnt[l] + CW'(1);
    end
    assign ready[l] = pwr_en[l] && (wake_cnt[l] == CW'(WAKE));
  end

endmodule
