// tb_boothflex_core: drives the radix-4 Booth array in both modes.
//  * INT8 mode: random 8x8 INT8 weight tiles times an INT8 vector, several
//    tiles accumulated per output; the array must accept one tile every
//    5 cycles (ceil((8+2)/2) Booth iterations) and the accumulators must equal
//    the integer dot products (16-bit wrap).
//  * Ternary mode: 2-bit codes (with random junk in the unused upper bits)
//    must be accepted every cycle and produce the ternary dot product.
//  * A mode switch between operations must not disturb either result.
module tb_boothflex_core;
  import vitallm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, acc_clr, busy;
  bf_mode_e mode;
  logic [7:0] mult [8][8];
  logic signed [7:0] mcand [8];
  logic signed [15:0] acc [8];
  int checks = 0, failures = 0;
  int cyc = 0;

  boothflex_core dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_op(input bf_mode_e m, input int ntiles);
    int expv [8];
    int acc_cyc [$];
    foreach (expv[r]) expv[r] = 0;
    @(negedge clk);
    acc_clr = 1; in_valid = 0; mode = m;
    @(negedge clk);
    acc_clr = 0;
    for (int t = 0; t < ntiles; t++) begin
      in_valid = 1;
      foreach (mcand[c]) mcand[c] = 8'($urandom);
      if (t == 0 && ntiles > 3) foreach (mcand[c]) mcand[c] = -8'sd128;
      foreach (mult[r, c]) begin
        if (m == BF_INT8) begin
          mult[r][c] = 8'($urandom);
          if (t == 0 && ntiles > 3) mult[r][c] = (c % 2) ? 8'h80 : 8'h7f;
          expv[r] += int'($signed(mult[r][c])) * int'(mcand[c]);
        end else begin
          automatic int v = $urandom_range(0, 2) - 1;
          mult[r][c] = {6'($urandom), (v == 1) ? 2'b01 : (v == -1) ? 2'b11 : 2'b00};
          expv[r] += v * int'(mcand[c]);
        end
      end
      // wait for the tile to be accepted
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      acc_cyc.push_back(cyc);
      @(negedge clk);
    end
    in_valid = 0;
    // throughput check
    for (int i = 1; i < acc_cyc.size(); i++) begin
      checks++;
      if (acc_cyc[i] - acc_cyc[i-1] != ((m == BF_INT8) ? 5 : 1)) begin
        failures++;
        $display("tile interval %0d", acc_cyc[i] - acc_cyc[i-1]);
      end
    end
    while (busy) @(negedge clk);
    @(negedge clk);
    for (int r = 0; r < 8; r++) begin
      checks++;
      if (acc[r] !== 16'(expv[r])) begin
        failures++;
        if (failures < 10) $display("mode %0d row %0d got %0d exp %0d", m, r, acc[r], 16'(expv[r]));
      end
    end
  endtask

  initial begin
    in_valid = 0; acc_clr = 0; mode = BF_INT8;
    foreach (mult[r, c]) mult[r][c] = 0;
    foreach (mcand[c]) mcand[c] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int op = 0; op < 40; op++) begin
      run_op(BF_INT8, 1 + $urandom_range(0, 8));
      run_op(BF_TERNARY, 1 + $urandom_range(0, 12));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
