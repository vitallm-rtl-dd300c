// tint_core: 8x8 ternary x INT8 processing-element array (TINT-Core).
//
// Each PE decodes its 2-bit ternary weight and selects +a, 0 or -a of the
// activation of its column; the eight PEs of a row form an adder chain whose
// head is a multiplexer choosing 0 (first tile of an output) or the row's
// partial-sum register (output stationary accumulation). Activations are
// broadcast down the columns, weights are unique per PE: 64 ternary MACs per
// cycle. All of this follows the paper's TINT-Core figure and text.
// Interface: in_valid with act[col] (INT8) and w[row][col]; first = 1 starts
// a new output (feedback replaced by 0). psum[row] is the row's register.
// Timing: psum is updated at the clock edge that samples in_valid, so the
// result of the last tile is visible the cycle after it was presented.
// The register width, PSUM_W = 16, is the width the top-level figure prints
// on the accumulator bus; sums wrap in two's complement (this design's choice).
module tint_core
  import vitallm_pkg::*;
#(
  parameter int unsigned N = ARR,
  parameter int unsigned W = PSUM_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               first,
  input  logic signed [7:0]  act  [N],
  input  logic [1:0]         w    [N][N],
  output logic signed [W-1:0] psum [N]
);
  function automatic logic signed [W-1:0] sel(input logic [1:0] code, input logic signed [7:0] a);
    unique case (code)
      T_POS:   return W'(a);
      T_NEG:   return -W'(a);
      default: return '0;
    endcase
  endfunction

  logic signed [W-1:0] row_sum [N];

  always_comb begin
    for (int r = 0; r < N; r++) begin
      row_sum[r] = first ? '0 : psum[r];
      for (int c = 0; c < N; c++) row_sum[r] = row_sum[r] + sel(w[r][c], act[c]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N; r++) psum[r] <= '0;
    end else if (in_valid) begin
      for (int r = 0; r < N; r++) psum[r] <= row_sum[r];
    end
  end
endmodule
