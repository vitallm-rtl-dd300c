// tb_tint_core: random ternary weight tiles and INT8 activations are streamed
// into the 8x8 TINT array; after the last tile of each output the row
// registers must equal the integer dot products (16-bit wrap). One tile per
// cycle: the result is checked the cycle after the last tile.
module tb_tint_core;
  import vitallm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, first;
  logic signed [7:0] act [8];
  logic [1:0] w [8][8];
  logic signed [15:0] psum [8];
  int checks = 0, failures = 0;

  tint_core dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expv [8];
    in_valid = 0; first = 0;
    foreach (act[i]) act[i] = 0;
    foreach (w[r, c]) w[r][c] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int op = 0; op < 60; op++) begin
      automatic int ntiles = 1 + $urandom_range(0, 20);
      foreach (expv[r]) expv[r] = 0;
      for (int t = 0; t < ntiles; t++) begin
        @(negedge clk);
        in_valid = 1;
        first = (t == 0);
        foreach (act[i]) act[i] = 8'($urandom);
        if (op == 0) foreach (act[i]) act[i] = -8'sd128;
        foreach (w[r, c]) begin
          automatic int v = $urandom_range(0, 2) - 1;
          if (op == 0) v = (r % 2) ? -1 : 1;
          w[r][c] = (v == 1) ? 2'b01 : (v == -1) ? 2'b11 : 2'b00;
          expv[r] += v * int'(act[c]);
        end
      end
      @(negedge clk);
      in_valid = 0;
      // an idle cycle must not disturb the result
      @(negedge clk);
      for (int r = 0; r < 8; r++) begin
        checks++;
        if (psum[r] !== 16'(expv[r])) begin
          failures++;
          if (failures < 10) $display("op %0d row %0d got %0d exp %0d", op, r, psum[r], 16'(expv[r]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
