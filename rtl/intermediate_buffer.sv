// intermediate_buffer: on-chip store of 16-bit partial sums and nonlinear results.
//
// Rows of 32 lanes x 16 bits: one row is what the four accumulators (three
// TINT cores and the BoothFlex core, 8 rows each) deliver at once, the
// 32 x 16 b bus of the top-level figure. Writes carry a lane mask so a single
// core or an 8-lane tile can be written alone. Two read ports each return one
// 8-lane quarter of a row (8 x 16 b): port A feeds the nonlinear unit, port B
// the leading-one predictor. Default depth: 1372 rows x 64 B = 87,808 B, the
// smallest whole number of rows holding the 87,748 B of the paper's memory
// breakdown. Port count, quarter addressing and the one-cycle registered read
// are this design's choices.
module intermediate_buffer
  import vitallm_pkg::*;
#(
  parameter int unsigned ROWS  = 1372,
  parameter int unsigned LANES = IB_LANES,
  localparam int unsigned RW   = $clog2(ROWS),
  localparam int unsigned QW   = $clog2(LANES/ARR)
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [RW-1:0]            wrow,
  input  logic [LANES-1:0]         wmask,
  input  logic signed [PSUM_W-1:0] wdata [LANES],
  input  logic                     rea,
  input  logic [RW-1:0]            rrowa,
  input  logic [QW-1:0]            rqa,
  output logic signed [PSUM_W-1:0] rdataa [ARR],
  input  logic                     reb,
  input  logic [RW-1:0]            rrowb,
  input  logic [QW-1:0]            rqb,
  output logic signed [PSUM_W-1:0] rdatab [ARR]
);
  logic [PSUM_W-1:0] mem [ROWS][LANES];

  always_ff @(posedge clk) begin
    if (we)
      for (int l = 0; l < LANES; l++)
        if (wmask[l]) mem[wrow][l] <= wdata[l];
  end

  always_ff @(posedge clk) begin
    if (rea) for (int i = 0; i < ARR; i++) rdataa[i] <= mem[rrowa][ARR*rqa + i];
    if (reb) for (int i = 0; i < ARR; i++) rdatab[i] <= mem[rrowb][ARR*rqb + i];
  end

  a_wr: assert property (@(posedge clk) we  |-> wrow  < RW'(ROWS));
  a_ra: assert property (@(posedge clk) rea |-> rrowa < RW'(ROWS));
  a_rb: assert property (@(posedge clk) reb |-> rrowb < RW'(ROWS));
endmodule
