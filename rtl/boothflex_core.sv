// boothflex_core: 8x8 radix-4 Booth PE array shared by INT8 x INT8 attention
// and ternary x INT8 projections (BoothFlex-Core).
//
// Every PE holds a Booth encoder fed by a 3-bit window of its own multiplier
// (multiplier buffer) and the multiplicand of its column (multiplicand
// buffer, broadcast). Each row sums its eight partial products through an
// adder chain into a first register; the chain head is a multiplexer taking
// 0 on the first iteration and that register shifted left by 2 afterwards,
// so PartialSum_i = PartialSum_(i-1) * 4 + sum_j PP(i,j). A second stage per
// row (adder, clear multiplexer and register) accumulates the finished dot
// products over input tiles: the output-stationary accumulator.
//
// Modes (from the paper):
//   BF_INT8    : multiplier = INT8, sign-extended to 10 bits and scanned in
//                5 windows from the top (N = ceil((8+2)/2) = 5 iterations).
//   BF_TERNARY : multiplier = 2-bit ternary code padded with a 0, one window,
//                one cycle per tile like a TINT core.
// Interface: in_valid/in_ready handshake with mode, mult[row][col] (for
// ternary only bits [1:0] are used) and mcand[col]. acc_clr loads 0 into the
// accumulators. acc[row] is the accumulator register.
// Timing: ternary tiles are accepted back to back; an INT8 tile occupies the
// array for 5 cycles (in_ready low for the last 4). A tile's product reaches
// acc on the clock edge after its last iteration. busy is high while any
// tile is still in flight. Register widths and the separate acc_clr input are
// this design's reading of the figure (the clear multiplexer after the adder).
module boothflex_core
  import vitallm_pkg::*;
#(
  parameter int unsigned N = ARR,
  parameter int unsigned W = PSUM_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  bf_mode_e           mode,
  input  logic [7:0]         mult  [N][N],
  input  logic signed [7:0]  mcand [N],
  input  logic               acc_clr,
  output logic               busy,
  output logic signed [W-1:0] acc  [N]
);
  localparam int unsigned PS_W = 24;   // holds a full 8-term INT8 dot product

  logic [9:0]        mult_buf  [N][N];  // sign-extended multipliers
  logic signed [7:0] mcand_buf [N];
  logic [2:0]        iter;              // remaining INT8 iterations after this one
  logic              running;           // INT8 tile in iterations 1..4
  logic signed [PS_W-1:0] ps [N];       // first-stage register
  logic              ps_valid;

  logic [2:0]        win   [N][N];
  logic signed [7:0] y_sel [N];
  logic signed [9:0] pp    [N][N];
  logic signed [PS_W-1:0] ps_next [N];
  logic              first_iter;
  logic [2:0]        widx;              // window index 0..4

  assign in_ready   = !running;
  assign first_iter = in_valid && in_ready;
  assign widx       = first_iter ? ((mode == BF_INT8) ? 3'd4 : 3'd0) : iter;

  function automatic logic [2:0] window(input logic [9:0] x, input logic [2:0] i);
    logic [10:0] xp;
    xp = {x, 1'b0};                      // x(-1) = 0
    return xp[2*i +: 3];
  endfunction

  always_comb begin
    for (int r = 0; r < N; r++) begin
      for (int c = 0; c < N; c++) begin
        if (first_iter && mode == BF_TERNARY)
          win[r][c] = {mult[r][c][1:0], 1'b0};            // ternary padding
        else if (first_iter)
          win[r][c] = window({{2{mult[r][c][7]}}, mult[r][c]}, widx);
        else
          win[r][c] = window(mult_buf[r][c], widx);
      end
    end
    for (int c = 0; c < N; c++) y_sel[c] = first_iter ? mcand[c] : mcand_buf[c];
  end

  for (genvar r = 0; r < N; r++) begin : g_row
    for (genvar c = 0; c < N; c++) begin : g_col
      booth_pp u_pp (.win(win[r][c]), .y(y_sel[c]), .pp(pp[r][c]));
    end
  end

  always_comb begin
    for (int r = 0; r < N; r++) begin
      ps_next[r] = first_iter ? '0 : (ps[r] <<< 2);
      for (int c = 0; c < N; c++) ps_next[r] = ps_next[r] + PS_W'(pp[r][c]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running  <= 1'b0;
      iter     <= '0;
      ps_valid <= 1'b0;
      for (int r = 0; r < N; r++) ps[r] <= '0;
      for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) mult_buf[r][c] <= '0;
      for (int c = 0; c < N; c++) mcand_buf[c] <= '0;
    end else begin
      ps_valid <= 1'b0;
      if (first_iter) begin
        for (int r = 0; r < N; r++) ps[r] <= ps_next[r];
        for (int r = 0; r < N; r++)
          for (int c = 0; c < N; c++) mult_buf[r][c] <= {{2{mult[r][c][7]}}, mult[r][c]};
        for (int c = 0; c < N; c++) mcand_buf[c] <= mcand[c];
        if (mode == BF_INT8) begin
          running <= 1'b1;
          iter    <= 3'd3;
        end else begin
          ps_valid <= 1'b1;
        end
      end else if (running) begin
        for (int r = 0; r < N; r++) ps[r] <= ps_next[r];
        if (iter == 3'd0) begin
          running  <= 1'b0;
          ps_valid <= 1'b1;
        end else begin
          iter <= iter - 3'd1;
        end
      end
    end
  end

  // Second stage: output-stationary accumulator with clear multiplexer.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N; r++) acc[r] <= '0;
    end else if (acc_clr) begin
      for (int r = 0; r < N; r++) acc[r] <= '0;
    end else if (ps_valid) begin
      for (int r = 0; r < N; r++) acc[r] <= acc[r] + W'(ps[r]);
    end
  end

  assign busy = running || ps_valid || (in_valid && in_ready);
endmodule
