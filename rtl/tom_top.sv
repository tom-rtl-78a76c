// tom_top: the TOM accelerator, a ternary-ROM engine for decoder-only LLM inference.
//
// M processing lanes (tom_lane), each a vector unit plus N chained MVUs that keep their
// slice of the ternary weights in logic-synthesised ROM and their slice of the KV cache
// in SRAM, are driven by one global controller (tom_global_ctrl, which includes the
// per-layer ROM power gating) and joined by one global reduction tree
// (tom_reduction_tree). Every lane runs the same instruction at the same time on its
// own data; the tree is their only connection: it sums or takes the maximum of one
// vector from every lane and writes the result back into all of them.
//
// Host side (the host itself is outside this design): load the program through p_*,
// pulse start, wait for done. Vector buffers of lane h_lane are written with h_we and
// read combinationally through h_rdata, while the accelerator is idle.
//
// Defaults follow the source's configuration: M = 16 lanes, N = 10 MVUs per lane,
// K = 16, 30 layers (BitNet-2B), 240 KB of SRAM per MVU. The ROM holds ROM_DEPTH words
// of 128 bits per layer per MVU, far less than the source's 3180 KB per MVU (see
// README). Vector-buffer depth, program memory depth and wake-up time are this
// design's own figures.
module tom_top
  import tom_pkg::*;
#(
  parameter int unsigned M          = 16,
  parameter int unsigned N          = 10,
  parameter int unsigned K          = 16,
  parameter int unsigned LAYERS     = 30,
  parameter int unsigned ROM_DEPTH  = 64,
  parameter int unsigned ROM_W      = 128,
  parameter int unsigned SRAM_DEPTH = 15360,
  parameter int unsigned VBUF_DEPTH = 512,
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned WAKE       = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          p_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] p_addr,
  input  instr_t                        p_data,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  input  logic                          h_we,
  input  logic [$clog2(M)-1:0]          h_lane,
  input  logic                          h_buf,
  input  logic [ADDR_W-1:0]             h_addr,
  input  vword_t [K-1:0]                h_wdata,
  output vword_t [K-1:0]                h_rdata,
  output logic [LAYER_W-1:0]            layer,
  output logic [LAYERS-1:0]             pwr_en,
  output logic                          overflow,
  output logic [31:0]                   pg_stall_cycles,
  output logic [31:0]                   layer_switches
);

  logic                   issue;
  instr_t                 instr;
  logic [M-1:0]           lane_busy, lane_ovf, lane_gv;
  logic [ADDR_W-1:0]      lane_gidx [M];
  vword_t [M-1:0][K-1:0]  lane_gdata;
  vword_t [K-1:0]         lane_hr [M];
  logic                   t_valid;
  logic [ADDR_W-1:0]      t_idx;
  vword_t [K-1:0]         t_data;

  tom_global_ctrl #(
    .M          (M),
    .LAYERS     (LAYERS),
    .IMEM_DEPTH (IMEM_DEPTH),
    .WAKE       (WAKE)
  ) u_ctrl (
    .clk             (clk),
    .rst_n           (rst_n),
    .p_we            (p_we),
    .p_addr          (p_addr),
    .p_data          (p_data),
    .start           (start),
    .busy            (busy),
    .done            (done),
    .issue           (issue),
    .instr           (instr),
    .lane_busy       (lane_busy),
    .layer           (layer),
    .pwr_en          (pwr_en),
    .pg_stall_cycles (pg_stall_cycles),
    .layer_switches  (layer_switches)
  );

  tom_reduction_tree #(
    .M (M),
    .K (K)
  ) u_tree (
    .clk       (clk),
    .rst_n     (rst_n),
    .op        (instr.sfu),
    .in_valid  (lane_gv[0]),
    .in_idx    (lane_gidx[0]),
    .in_data   (lane_gdata),
    .out_valid (t_valid),
    .out_idx   (t_idx),
    .out_data  (t_data)
  );

  for (genvar m = 0; m < M; m++) begin : g_lane
    tom_lane #(
      .K          (K),
      .N          (N),
      .LAYERS     (LAYERS),
      .ROM_DEPTH  (ROM_DEPTH),
      .ROM_W      (ROM_W),
      .SRAM_DEPTH (SRAM_DEPTH),
      .VBUF_DEPTH (VBUF_DEPTH),
      .LANE_ID    (m)
    ) u_lane (
      .clk       (clk),
      .rst_n     (rst_n),
      .issue     (issue),
      .instr     (instr),
      .layer     (layer),
      .pwr_en    (pwr_en),
      .busy      (lane_busy[m]),
      .overflow  (lane_ovf[m]),
      .g_valid   (lane_gv[m]),
      .g_idx     (lane_gidx[m]),
      .g_data    (lane_gdata[m]),
      .gin_valid (t_valid),
      .gin_idx   (t_idx),
      .gin_data  (t_data),
      .h_we      (h_we && h_lane == $clog2(M)'(m)),
      .h_buf     (h_buf),
      .h_addr    (h_addr),
      .h_wdata   (h_wdata),
      .h_rdata   (lane_hr[m])
    );
  end

  assign h_rdata  = lane_hr[h_lane];
  assign overflow = |lane_ovf;

  // All lanes run the same instruction, so they talk to the tree in lock step.
  a_lockstep : assert property (@(posedge clk) disable iff (!rst_n)
    (lane_gv == '0) || (lane_gv == '1));

endmodule
