// tb_lop_core: fills the query buffer of the log-domain score array with
// random sign/leading-one codes, then streams random key tiles over several
// dimension tiles (with a partial last tile) and checks every row score
// against sum(+-2^(LOq+LOk)) computed here. One key tile is consumed per
// cycle; the score of a key group is checked the cycle after its last tile.
module tb_lop_core;
  import vitallm_pkg::*;
  localparam int DT = 16;
  logic clk = 0, rst_n = 0;
  logic q_we, k_valid, first;
  logic [3:0] q_tile, k_tile;
  logic [3:0] q_lo [8];
  logic [7:0] dim_mask;
  logic [3:0] k_lo [8][8];
  logic signed [23:0] score [8];
  logic [3:0] qmodel [DT][8];
  int checks = 0, failures = 0;

  lop_core dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    q_we = 0; k_valid = 0; first = 0; q_tile = 0; k_tile = 0; dim_mask = 0;
    foreach (q_lo[i]) q_lo[i] = 0;
    foreach (k_lo[r, c]) k_lo[r][c] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 30; trial++) begin
      automatic int ndt = 1 + $urandom_range(0, DT - 1);
      automatic int lastd = 1 + $urandom_range(0, 7);
      for (int t = 0; t < ndt; t++) begin
        @(negedge clk);
        q_we = 1; q_tile = 4'(t);
        foreach (q_lo[i]) begin q_lo[i] = 4'($urandom); qmodel[t][i] = q_lo[i]; end
      end
      @(negedge clk); q_we = 0;
      for (int g = 0; g < 4; g++) begin
        longint expv [8];
        foreach (expv[r]) expv[r] = 0;
        for (int t = 0; t < ndt; t++) begin
          @(negedge clk);
          k_valid = 1; k_tile = 4'(t); first = (t == 0);
          dim_mask = (t == ndt - 1) ? 8'((1 << lastd) - 1) : 8'hff;
          foreach (k_lo[r, c]) begin
            k_lo[r][c] = 4'($urandom);
            if (dim_mask[c]) begin
              automatic longint m = longint'(1) << (int'(qmodel[t][c][2:0]) + int'(k_lo[r][c][2:0]));
              expv[r] += (qmodel[t][c][3] ^ k_lo[r][c][3]) ? -m : m;
            end
          end
        end
        @(negedge clk); k_valid = 0;
        for (int r = 0; r < 8; r++) begin
          checks++;
          if (score[r] !== 24'(expv[r])) begin
            failures++;
            if (failures < 10) $display("trial %0d row %0d got %0d exp %0d", trial, r, score[r], expv[r]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
