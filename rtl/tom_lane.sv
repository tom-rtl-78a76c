// tom_lane: one processing lane, a vector unit (tom_vu) in front of a chain of N
// matrix-vector units (tom_mvu).
//
// The VU streams activation beats into MVU 0; every MVU registers a beat and hands it
// to the next one a cycle later, so MVU n sees a beat n cycles after MVU 0. Results go
// the other way: each MVU's result slot feeds the slot of the MVU in front of it, and
// MVU 0's slot feeds the VU. All MVUs of a lane share the per-instruction configuration
// that the VU latched (mode, length, weight base, target MVU) and the global layer
// number and ROM power enables. The lane talks to other lanes only through the global
// reduction tree (g_* / gin_* ports).
//
// Structure (VU, N chained MVUs, activations one way and results back) follows the
// source's architecture figure; the port set is this design's.
module tom_lane
  import tom_pkg::*;
#(
  parameter int unsigned K          = 16,
  parameter int unsigned N          = 10,
  parameter int unsigned LAYERS     = 30,
  parameter int unsigned ROM_DEPTH  = 64,
  parameter int unsigned ROM_W      = 128,
  parameter int unsigned SRAM_DEPTH = 15360,
  parameter int unsigned VBUF_DEPTH = 512,
  parameter int unsigned LANE_ID    = 0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                issue,
  input  instr_t              instr,
  input  logic [LAYER_W-1:0]  layer,
  input  logic [LAYERS-1:0]   pwr_en,
  output logic                busy,
  output logic                overflow,
  output logic                g_valid,
  output logic [ADDR_W-1:0]   g_idx,
  output vword_t [K-1:0]      g_data,
  input  logic                gin_valid,
  input  logic [ADDR_W-1:0]   gin_idx,
  input  vword_t [K-1:0]      gin_data,
  input  logic                h_we,
  input  logic                h_buf,
  input  logic [ADDR_W-1:0]   h_addr,
  input  vword_t [K-1:0]      h_wdata,
  output vword_t [K-1:0]      h_rdata
);

  // activation chain: index n is the input of MVU n, index N the output of the last
  logic              c_valid [N+1];
  logic              c_kvw   [N+1];
  logic              c_last  [N+1];
  logic [LEN_W-1:0]  c_i     [N+1];
  logic [ROWS_W-1:0] c_r     [N+1];
  fp8_t [K-1:0]      c_data  [N+1];

  // result chain: index n is the output of MVU n, index N the (empty) tail
  logic               q_valid [N+1];
  logic               q_ready [N+1];
  acc_t               q_acc   [N+1];
  logic [MVUID_W-1:0] q_mvu   [N+1];
  logic [ROWS_W-1:0]  q_row   [N+1];

  logic [N-1:0] ovf;

  assign q_valid[N] = 1'b0;
  assign q_acc[N]   = '0;
  assign q_mvu[N]   = '0;
  assign q_row[N]   = '0;

  tom_vu #(
    .K       (K),
    .N       (N),
    .DEPTH   (VBUF_DEPTH),
    .LANE_ID (LANE_ID)
  ) u_vu (
    .clk       (clk),
    .rst_n     (rst_n),
    .issue     (issue),
    .instr     (instr),
    .busy      (busy),
    .s_valid   (c_valid[0]),
    .s_kvw     (c_kvw[0]),
    .s_last    (c_last[0]),
    .s_i       (c_i[0]),
    .s_r       (c_r[0]),
    .s_data    (c_data[0]),
    .r_valid   (q_valid[0]),
    .r_ready   (q_ready[0]),
    .r_acc     (q_acc[0]),
    .r_mvu     (q_mvu[0]),
    .r_row     (q_row[0]),
    .g_valid   (g_valid),
    .g_idx     (g_idx),
    .g_data    (g_data),
    .gin_valid (gin_valid),
    .gin_idx   (gin_idx),
    .gin_data  (gin_data),
    .h_we      (h_we),
    .h_buf     (h_buf),
    .h_addr    (h_addr),
    .h_wdata   (h_wdata),
    .h_rdata   (h_rdata)
  );

  // configuration latched in the VU when the instruction was issued
  instr_t ir;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               ir <= '0;
    else if (issue && !busy)  ir <= instr;
  end

  for (genvar n = 0; n < N; n++) begin : g_mvu
    tom_mvu #(
      .K          (K),
      .LAYERS     (LAYERS),
      .ROM_DEPTH  (ROM_DEPTH),
      .ROM_W      (ROM_W),
      .SRAM_DEPTH (SRAM_DEPTH),
      .MVU_ID     (n)
    ) u_mvu (
      .clk        (clk),
      .rst_n      (rst_n),
      .cfg_mode   (ir.mode),
      .cfg_layer  (layer),
      .cfg_len    (ir.len),
      .cfg_wbase  (ir.waddr),
      .cfg_mvu    (ir.mvu),
      .pwr_en     (pwr_en),
      .in_valid   (c_valid[n]),
      .in_kvw     (c_kvw[n]),
      .in_last    (c_last[n]),
      .in_i       (c_i[n]),
      .in_r       (c_r[n]),
      .in_data    (c_data[n]),
      .out_valid  (c_valid[n+1]),
      .out_kvw    (c_kvw[n+1]),
      .out_last   (c_last[n+1]),
      .out_i      (c_i[n+1]),
      .out_r      (c_r[n+1]),
      .out_data   (c_data[n+1]),
      .rin_valid  (q_valid[n+1]),
      .rin_ready  (q_ready[n+1]),
      .rin_acc    (q_acc[n+1]),
      .rin_mvu    (q_mvu[n+1]),
      .rin_row    (q_row[n+1]),
      .rout_valid (q_valid[n]),
      .rout_ready (q_ready[n]),
      .rout_acc   (q_acc[n]),
      .rout_mvu   (q_mvu[n]),
      .rout_row   (q_row[n]),
      .overflow   (ovf[n])
    );
  end

  assign overflow = |ovf;

endmodule
