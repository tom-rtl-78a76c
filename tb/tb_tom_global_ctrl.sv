// tb_tom_global_ctrl: the controller with two stand-in lanes that stay busy a random
// 1..6 cycles after each issue pulse. The program is
//   LAYER 3, GEMV(FFN), VOP, LAYER 4, NOP x6, GEMV(FFN), GRED, HALT.
// Checks: the issued instructions and their order; no issue while a lane is busy;
// the first GEMV waits for layer 3's banks to wake (stall cycles counted), the second
// does not wait because layer 4 was powered up while layer 3 ran; pwr_en holds exactly
// the active layer and its successor; two layer switches; done at the end.
module tb_tom_global_ctrl;
  import tom_pkg::*;

  localparam int unsigned M = 2, LAYERS = 30, IMEM_DEPTH = 16, WAKE = 4;

  logic clk = 0, rst_n;
  logic p_we, start, busy, done, issue;
  logic [3:0] p_addr;
  instr_t p_data, instr;
  logic [M-1:0] lane_busy;
  logic [LAYER_W-1:0] layer;
  logic [LAYERS-1:0] pwr_en;
  logic [31:0] pg_stall_cycles, layer_switches;

  tom_global_ctrl #(.M(M), .LAYERS(LAYERS), .IMEM_DEPTH(IMEM_DEPTH), .WAKE(WAKE)) dut (.*);

  int checks = 0, failures = 0, n_issued = 0, stall_after_first = -1;
  opcode_e issued [16];
  int busy_cnt = 0;

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stand-in lanes
  always @(posedge clk) begin
    if (!rst_n) begin
      lane_busy <= '0; busy_cnt <= 0;
    end else if (issue) begin
      checks++;
      if (lane_busy != '0) failures++;
      issued[n_issued] <= instr.op;
      n_issued <= n_issued + 1;
      if (n_issued == 0) stall_after_first <= int'(pg_stall_cycles);
      lane_busy <= '1; busy_cnt <= 1 + int'($urandom % 6);
    end else if (busy_cnt > 1) busy_cnt <= busy_cnt - 1;
    else lane_busy <= '0;
  end

  // power check on every cycle with an active layer
  always @(negedge clk) if (rst_n && busy && layer_switches != 0) begin
    logic [LAYERS-1:0] want;
    want = '0; want[layer] = 1'b1; want[(int'(layer) + 1) % LAYERS] = 1'b1;
    checks++;
    if (pwr_en !== want) failures++;
  end

  function automatic instr_t mk(opcode_e op, int lay);
    instr_t i;
    i = '0; i.op = op; i.layer = LAYER_W'(lay); i.mode = GM_FFN; i.len = 1;
    return i;
  endfunction

  initial begin
    instr_t prog [12];
    opcode_e want_ops [4];
    prog = '{mk(OP_LAYER, 3), mk(OP_GEMV, 0), mk(OP_VOP, 0), mk(OP_LAYER, 4),
             mk(OP_NOP, 0), mk(OP_NOP, 0), mk(OP_NOP, 0), mk(OP_NOP, 0), mk(OP_NOP, 0),
             mk(OP_GEMV, 0), mk(OP_GRED, 0), mk(OP_HALT, 0)};
    want_ops = '{OP_GEMV, OP_VOP, OP_GEMV, OP_GRED};
    rst_n = 0; p_we = 0; p_addr = 0; p_data = '0; start = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 12; a++) begin
      @(negedge clk); p_we = 1; p_addr = 4'(a); p_data = prog[a];
    end
    @(negedge clk); p_we = 0; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (n_issued != 4) failures++;
    for (int i = 0; i < 4; i++) begin checks++; if (issued[i] != want_ops[i]) failures++; end
    checks++;
    if (stall_after_first < 1) begin failures++; $display("first GEMV did not wait"); end
    checks++;
    if (int'(pg_stall_cycles) != stall_after_first) begin
      failures++; $display("second GEMV waited: %0d vs %0d", pg_stall_cycles, stall_after_first);
    end
    checks++;
    if (layer_switches != 2 || layer != 4) failures++;
    checks++;
    if (busy) failures++;
    $display("stall cycles %0d", pg_stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
