// booth_pp: one radix-4 Booth partial-product generator.
//
// The 3-bit window {x(2i+1), x(2i), x(2i-1)} selects 0, +Y, +2Y, -2Y or -Y of
// the INT8 multiplicand Y, exactly as the standard radix-4 Booth table.
// A ternary weight enters as its 2-bit code padded with a 0 LSB, so
// 010 gives +Y, 000 gives 0 and 110 gives -Y. Purely combinational.
module booth_pp (
  input  logic [2:0]        win,
  input  logic signed [7:0] y,
  output logic signed [9:0] pp
);
  always_comb begin
    unique case (win)
      3'b001, 3'b010: pp = 10'(y);
      3'b011:         pp = 10'(y) <<< 1;
      3'b100:         pp = -(10'(y) <<< 1);
      3'b101, 3'b110: pp = -10'(y);
      default:        pp = '0;      // 000, 111
    endcase
  end
endmodule
