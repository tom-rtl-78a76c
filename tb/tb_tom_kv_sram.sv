// tb_tom_kv_sram: random single-port traffic against a reference array. Checks that a
// read returns the last written word exactly one cycle later, that rdata holds between
// reads, and that a write wins over a simultaneous read.
module tb_tom_kv_sram;
  localparam int unsigned DEPTH = 256, WIDTH = 128;

  logic             clk = 0;
  logic             re, we;
  logic [7:0]       addr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  tom_kv_sram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] expect_q;
    re = 0; we = 0; addr = 0; wdata = 0;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; addr = 8'(a); wdata = {$urandom, $urandom, $urandom, $urandom};
      ref_mem[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      addr = 8'($urandom);
      case ($urandom % 3)
        0: begin we = 1; re = 1; wdata = {$urandom, $urandom, $urandom, $urandom};
                 ref_mem[addr] = wdata; end                 // write beats read
        1: begin we = 0; re = 1; expect_q = ref_mem[addr]; end
        default: begin we = 0; re = 0; end
      endcase
      if (re && !we) begin
        @(negedge clk);
        re = 0;
        checks++;
        if (rdata !== expect_q) begin failures++; $display("read mismatch @%0d", addr); end
        @(negedge clk);                                      // idle cycle: rdata must hold
        checks++;
        if (rdata !== expect_q) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
