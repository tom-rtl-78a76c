// tom_rom_bank: one sparsity-aware ternary ROM bank.
//
// The bank stores DEPTH words of WIDTH bits (WIDTH/2 ternary weights per word, 2-bit
// codes 00 = 0, 01 = +1, 10 = -1) not as a cell array but as combinational logic, the
// way the published design builds its weight memory: the address goes through a
// log2(DEPTH)-to-DEPTH one-hot decoder, and each output bit j is the OR of exactly those
// decoded lines whose stored word has a 1 in bit j. Bits that are 0 in every word are
// tied to ground and cost no logic, so the area follows the number of one-bits, and the
// synthesis tool is free to share common OR sub-terms between output bits.
//
// Contents come from tom_pkg::rom_weight(SEED, row, col), a stand-in for trained model
// weights (this design has no model to bake in). The OR-plane masks are computed at
// elaboration time from that function, two DEPTH-bit masks per weight column.
//
// Power gating: pwr_en models the bank's power switch together with its output
// isolation. While pwr_en is low the bank outputs all zeros. The wake-up delay of the
// switch is modelled centrally in tom_power_ctrl, not here.
//
// Timing: purely combinational, address to data in the same cycle.
// Defaults follow the bank geometry the source found densest: 1024 words x 128 bits.
module tom_rom_bank
  import tom_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 128,
  parameter int unsigned SEED  = 1
) (
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic                     pwr_en,
  output logic [WIDTH-1:0]         data
);

  // OR-plane masks of weight column c: bit r of the low half is bit 0 of weight (r, c),
  // bit r of the high half is its bit 1.
  function automatic logic [2*DEPTH-1:0] col_mask(int unsigned c);
    logic [2*DEPTH-1:0] m;
    tern_t              w;
    for (int unsigned r = 0; r < DEPTH; r++) begin
      w            = rom_weight(SEED, r, c);
      m[r]         = w[0];
      m[DEPTH + r] = w[1];
    end
    return m;
  endfunction

  logic [DEPTH-1:0] addr_d;   // decoded address, one-hot

  always_comb begin
    addr_d = '0;
    addr_d[addr] = 1'b1;
  end

  for (genvar c = 0; c < WIDTH / 2; c++) begin : g_col
    localparam logic [2*DEPTH-1:0] MASK = col_mask(c);
    assign data[2*c]     = pwr_en & (|(addr_d & MASK[DEPTH-1:0]));
    assign data[2*c + 1] = pwr_en & (|(addr_d & MASK[2*DEPTH-1:DEPTH]));
  end

endmodule
