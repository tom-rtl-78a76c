// tom_reduction_tree: the global reduction tree, the only path between lanes.
//
// Every cycle each of the M lanes may offer one vector of K Q16.16 words (all lanes
// offer in the same cycle, since they run the same instruction). The tree combines the
// M vectors element by element, with either a sum (op = SFU_ADD, saturating) or a
// maximum (op = SFU_MAX), in log2(M) pipelined levels of pairwise nodes, and returns
// the K results with the entry index that travelled with them. The caller writes the
// result back into every lane.
//
// Timing: fully pipelined, one vector per cycle, latency log2(M) cycles (one register
// per level; M must be a power of two). op must stay constant while a stream is inside.
//
// The source gives the tree's function (sum and max across all lanes, results written
// back to the lanes); the pairwise structure and the pipelining are this design's.
module tom_reduction_tree
  import tom_pkg::*;
#(
  parameter int unsigned M = 16,
  parameter int unsigned K = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  sfu_op_e                     op,
  input  logic                        in_valid,
  input  logic [ADDR_W-1:0]           in_idx,
  input  vword_t [M-1:0][K-1:0]       in_data,
  output logic                        out_valid,
  output logic [ADDR_W-1:0]           out_idx,
  output vword_t [K-1:0]              out_data
);

  localparam int unsigned LV = $clog2(M);

  function automatic vword_t node(sfu_op_e o, vword_t x, vword_t y);
    logic signed [VW:0] s;
    if (o == SFU_MAX) return (x > y) ? x : y;
    s = (VW+1)'(x) + (VW+1)'(y);
    if (s > (VW+1)'(32'sh7fffffff))  return 32'sh7fffffff;
    if (s < -(VW+1)'(32'sh7fffffff)) return -32'sh7fffffff;
    return vword_t'(s);
  endfunction

  // level l holds M >> l vectors
  vword_t [M-1:0][K-1:0]  lvl   [LV+1];
  logic                   lv_v  [LV+1];
  logic [ADDR_W-1:0]      lv_i  [LV+1];

  assign lvl[0]  = in_data;
  assign lv_v[0] = in_valid;
  assign lv_i[0] = in_idx;

  for (genvar l = 0; l < LV; l++) begin : g_lvl
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        lvl[l+1]  <= '0;
        lv_v[l+1] <= 1'b0;
        lv_i[l+1] <= '0;
      end else begin
        lv_v[l+1] <= lv_v[l];
        lv_i[l+1] <= lv_i[l];
        for (int n = 0; n < (M >> (l + 1)); n++)
          for (int k = 0; k < K; k++)
            lvl[l+1][n][k] <= node(op, lvl[l][2*n][k], lvl[l][2*n+1][k]);
      end
    end
  end

  assign out_valid = lv_v[LV];
  assign out_idx   = lv_i[LV];
  assign out_data  = lvl[LV][0];

endmodule
