// tb_tom_rom_bank: exhaustive check of a 64 x 128 sparsity-aware ROM bank.
// Every address is read with the bank powered and the word is compared with the
// weights the bank was built from (2 bits per weight, 01 = +1, 10 = -1, 00 = 0);
// every address is read again with the bank gated and must return zero. The share of
// zero bits is reported and must exceed 60 % for weights that are 40 % zero.
module tb_tom_rom_bank;
  import tom_pkg::*;

  localparam int unsigned DEPTH = 64, WIDTH = 128, SEED = 77;

  logic [5:0]       addr;
  logic             pwr_en;
  logic [WIDTH-1:0] data;
  int checks = 0, failures = 0, zeros = 0;

  tom_rom_bank #(.DEPTH(DEPTH), .WIDTH(WIDTH), .SEED(SEED)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] exp_w;
    pwr_en = 1'b1;
    for (int a = 0; a < DEPTH; a++) begin
      addr = 6'(a);
      for (int c = 0; c < WIDTH / 2; c++) exp_w[2*c +: 2] = rom_weight(SEED, a, c);
      #1;
      checks++;
      if (data !== exp_w) begin
        failures++;
        $display("addr %0d: got %h want %h", a, data, exp_w);
      end
      for (int b = 0; b < WIDTH; b++) if (!exp_w[b]) zeros++;
    end
    pwr_en = 1'b0;
    for (int a = 0; a < DEPTH; a++) begin
      addr = 6'(a);
      #1;
      checks++;
      if (data != '0) failures++;
    end
    checks++;
    $display("zero-bit ratio %0.3f", real'(zeros) / (DEPTH * WIDTH));
    if (real'(zeros) / (DEPTH * WIDTH) < 0.6) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
