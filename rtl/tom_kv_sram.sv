// tom_kv_sram: the SRAM of one MVU, holding its slice of the KV cache and, in the same
// space, ternary LoRA adapter weights.
//
// Single-port synchronous memory of DEPTH words of WIDTH bits: one read or one write
// per cycle. A read issued in cycle t (re high) returns its word on rdata in cycle t+1;
// rdata holds its value until the next read. A write (we high) takes priority over a
// read in the same cycle. Contents are not reset.
//
// The default size is the source's 240 KB per MVU, as 15360 words of 128 bits: one word
// is K = 16 FP8 values, the width the MVU consumes per cycle (word width is this
// design's choice). The source builds this from a compiled SRAM macro; here it is a
// plain array that a synthesis flow maps to one.
module tom_kv_sram #(
  parameter int unsigned DEPTH = 15360,
  parameter int unsigned WIDTH = 128
) (
  input  logic                     clk,
  input  logic                     re,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)      mem[addr] <= wdata;
    else if (re) rdata     <= mem[addr];
  end

endmodule
