// weight_unpack: the bank of ternary weight unpacking LUTs at the memory interface.
//
// N_LUT bytes of packed weights arrive per cycle from external memory
// (52 x 8 b in the paper's top-level figure); each goes through its own
// 256 x 10 b table and leaves as five 2-bit ternary codes, N_LUT*5 trits in
// all (260 for the paper's 52 LUTs, enough for the 256 PEs of three TINT
// cores and the BoothFlex core). Trit k of the output is trit k%5 of byte k/5.
// Timing: one cycle from in_valid/in_bytes to out_valid/out_trits.
module weight_unpack
  import vitallm_pkg::*;
#(
  parameter int unsigned NL = N_LUT
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [7:0]        in_bytes  [NL],
  output logic              out_valid,
  output logic [1:0]        out_trits [NL*5]
);
  logic [9:0] codes [NL];

  for (genvar g = 0; g < NL; g++) begin : g_lut
    ternary_lut u_lut (.clk(clk), .addr(in_bytes[g]), .codes(codes[g]));
    for (genvar t = 0; t < 5; t++) begin : g_trit
      assign out_trits[g*5 + t] = codes[g][2*t +: 2];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
