// tb_tom_power_ctrl: walks the active layer 0..29 and back to 0, as a model run does.
// After each change exactly the active layer and its successor (29 -> 0) may be powered,
// and a bank that was just switched on must report ready exactly WAKE = 4 cycles later.
module tb_tom_power_ctrl;
  import tom_pkg::*;

  localparam int unsigned LAYERS = 30, WAKE = 4;

  logic               clk = 0, rst_n, set;
  logic [LAYER_W-1:0] layer;
  logic [LAYERS-1:0]  pwr_en, ready;
  int checks = 0, failures = 0;

  tom_power_ctrl #(.LAYERS(LAYERS), .WAKE(WAKE)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [LAYERS-1:0] want;
    int nxt, t_ready;
    rst_n = 0; set = 0; layer = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (pwr_en != '0) failures++;                     // nothing powered before the first set
    for (int l = 0; l <= LAYERS; l++) begin
      set = 1; layer = LAYER_W'(l % LAYERS);
      @(negedge clk);
      set = 0;
      nxt  = (l % LAYERS + 1) % LAYERS;
      want = '0; want[l % LAYERS] = 1'b1; want[nxt] = 1'b1;
      checks++;
      if (pwr_en !== want) begin failures++; $display("layer %0d pwr %b", l, pwr_en); end
      // the newly powered successor must become ready after WAKE cycles
      t_ready = 0;
      while (!ready[nxt] && t_ready < 20) begin @(negedge clk); t_ready++; end
      checks++;
      if (t_ready != WAKE - 1 && t_ready != WAKE) begin
        failures++; $display("layer %0d next ready after %0d", l, t_ready);
      end
      checks++;
      if (!ready[l % LAYERS]) failures++;             // the active layer was pre-powered
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
