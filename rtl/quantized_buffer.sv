// quantized_buffer: on-chip store of INT8 activation vectors.
//
// Three banks of 1088 rows x 64 bits (eight INT8 values per row), the size
// printed in the top-level figure; 3 x 1088 x 8 B = 26,112 B as in the
// memory breakdown. One row write port (eight quantized values from the
// nonlinear unit or the host) and two row read ports: port 1 feeds the TINT
// cores (activation broadcast) and port 2 feeds the BoothFlex multiplicand
// buffer. The bank count and row size are the paper's; the two read ports and
// the one-cycle registered read are this design's choices (the paper does
// not describe the macro ports).
module quantized_buffer
  import vitallm_pkg::*;
#(
  parameter int unsigned BANKS = 3,
  parameter int unsigned ROWS  = 1088,
  localparam int unsigned BW   = $clog2(BANKS),
  localparam int unsigned RW   = $clog2(ROWS)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [BW-1:0]     wbank,
  input  logic [RW-1:0]     wrow,
  input  logic signed [7:0] wdata [ARR],
  input  logic              re1,
  input  logic [BW-1:0]     rbank1,
  input  logic [RW-1:0]     rrow1,
  output logic signed [7:0] rdata1 [ARR],
  input  logic              re2,
  input  logic [BW-1:0]     rbank2,
  input  logic [RW-1:0]     rrow2,
  output logic signed [7:0] rdata2 [ARR]
);
  logic [8*ARR-1:0] mem [BANKS][ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[wbank][wrow] <= {<<8{wdata}};
  end

  always_ff @(posedge clk) begin
    if (re1) {<<8{rdata1}} <= mem[rbank1][rrow1];
    if (re2) {<<8{rdata2}} <= mem[rbank2][rrow2];
  end

  // Addresses must stay inside the array.
  a_wr: assert property (@(posedge clk) we  |-> (wbank  < BW'(BANKS) && wrow  < RW'(ROWS)));
  a_r1: assert property (@(posedge clk) re1 |-> (rbank1 < BW'(BANKS) && rrow1 < RW'(ROWS)));
  a_r2: assert property (@(posedge clk) re2 |-> (rbank2 < BW'(BANKS) && rrow2 < RW'(ROWS)));
endmodule
