// lop_core: Leading One Prediction core, ExpAdd array with its activation buffer.
//
// The query's leading-one codes are written tile by tile (8 dimensions per
// tile) into the activation buffer. Scoring then streams 8 keys x 8 dims of
// key codes per cycle; each ExpAdd PE adds the two 3-bit LO fields, turns the
// sum into 1 << (LOq + LOk) and applies the product of the signs. A row's
// eight ExpAdd terms are summed along an adder chain whose head chooses 0
// (first dim tile) or the row's score register, so after the last dim tile
// score[row] = sum_i sgn(q_i) sgn(k_i) 2^(LO(q_i)+LO(k_i)), the paper's
// surrogate score, for key `row` of the group.
// Interface: q_we/q_tile/q_lo load the buffer. k_valid with k_tile (the dim
// tile index), k_lo[key][dim], first and dim_mask (valid dims of this tile;
// masked dims contribute nothing) scores one tile.
// Timing: score is updated on the edge that samples k_valid, one tile per
// cycle. The dim mask and SCORE_W = 24 are this design's choices.
module lop_core
  import vitallm_pkg::*;
#(
  parameter int unsigned N        = ARR,
  parameter int unsigned DTILES   = 16,     // 128 dims of head buffer
  parameter int unsigned SCORE_W  = 24
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     q_we,
  input  logic [$clog2(DTILES)-1:0] q_tile,
  input  logic [LO_W-1:0]          q_lo  [N],
  input  logic                     k_valid,
  input  logic [$clog2(DTILES)-1:0] k_tile,
  input  logic                     first,
  input  logic [N-1:0]             dim_mask,
  input  logic [LO_W-1:0]          k_lo  [N][N],
  output logic signed [SCORE_W-1:0] score [N]
);
  logic [LO_W-1:0] qbuf [DTILES][N];
  logic signed [SCORE_W-1:0] row_sum [N];

  function automatic logic signed [SCORE_W-1:0] expadd(input logic [LO_W-1:0] q, input logic [LO_W-1:0] k);
    logic [3:0] e;
    logic signed [SCORE_W-1:0] m;
    e = {1'b0, q[2:0]} + {1'b0, k[2:0]};
    m = SCORE_W'(1) <<< e;
    return (q[3] ^ k[3]) ? -m : m;
  endfunction

  always_comb begin
    for (int r = 0; r < N; r++) begin
      row_sum[r] = first ? '0 : score[r];
      for (int c = 0; c < N; c++)
        if (dim_mask[c]) row_sum[r] = row_sum[r] + expadd(qbuf[k_tile][c], k_lo[r][c]);
    end
  end

  always_ff @(posedge clk) begin
    if (q_we) for (int c = 0; c < N; c++) qbuf[q_tile][c] <= q_lo[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N; r++) score[r] <= '0;
    end else if (k_valid) begin
      for (int r = 0; r < N; r++) score[r] <= row_sum[r];
    end
  end
endmodule
