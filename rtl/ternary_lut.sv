// ternary_lut: one 256-entry x 10-bit ternary weight unpacking table.
//
// A packed byte holds five ternary weights (base-3, 1.6 bits per weight).
// The table maps each byte to five 2-bit codes (+1 = 01, 0 = 00, -1 = 11).
// The paper gives the table size (256 x 10 b) and its purpose; the contents
// follow from the base-3 packing order chosen in vitallm_pkg::unpack_byte,
// evaluated at elaboration, so no data file is needed.
// Timing: the read is registered like a synchronous SRAM, one cycle latency.
module ternary_lut
  import vitallm_pkg::*;
(
  input  logic       clk,
  input  logic [7:0] addr,
  output logic [9:0] codes
);
  logic [9:0] rom [256];

  always_comb begin
    for (int i = 0; i < 256; i++) rom[i] = unpack_byte(8'(i));
  end

  always_ff @(posedge clk) codes <= rom[addr];
endmodule
