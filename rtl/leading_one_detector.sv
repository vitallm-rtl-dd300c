// leading_one_detector: compresses INT8 values into the 4-bit leading-one form.
//
// Each lane emits {sign, LO} where LO = floor(log2|x|) (3 bits; |-128| gives 7).
// The surrogate score of the leading-one predictor uses only these bits. The
// paper defines the 4-bit form (one sign bit, three LO bits); the paper leaves
// zero unspecified, and this design encodes 0 as {0, 3'd0}, i.e. the same as
// +1. Purely combinational.
module leading_one_detector
  import vitallm_pkg::*;
#(
  parameter int unsigned N = ARR
) (
  input  logic signed [7:0] x  [N],
  output logic [LO_W-1:0]   lo [N]
);
  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic [7:0] mag;
      logic [2:0] pos;
      mag = x[i][7] ? 8'(-x[i]) : 8'(x[i]);   // -128 -> 8'h80
      pos = '0;
      for (int b = 0; b < 8; b++) if (mag[b]) pos = 3'(b);
      lo[i] = {x[i][7], pos};
    end
  end
endmodule
