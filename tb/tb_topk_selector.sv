// tb_topk_selector: loads random scores (many ties, negative values) for a
// random number of tokens in groups of 8, starts the selection and compares
// the streamed index set with a reference top-K (highest score first, lower
// index first among equal scores). Timing: the first index must appear
// SCORE_W+1 cycles after start (one cycle per bit plane), then one index per
// accepted cycle; back-pressure is exercised with random out_ready.
module tb_topk_selector;
  import vitallm_pkg::*;
  localparam int MS = 256, K = 32, SW = 24;
  logic clk = 0, rst_n = 0;
  logic clr, ld_valid, start, busy, out_valid, out_ready, done;
  logic [7:0] ld_base, out_idx;
  logic [7:0] ld_mask;
  logic signed [23:0] ld_score [8];
  int checks = 0, failures = 0;
  int scores [MS];

  topk_selector #(.MAX_SEQ(MS), .K(K), .SCORE_W(SW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; ld_valid = 0; start = 0; out_ready = 0; ld_base = 0; ld_mask = 0;
    foreach (ld_score[i]) ld_score[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      automatic int ntok = (trial == 0) ? 5 : (trial == 1) ? MS : 1 + $urandom_range(0, MS - 1);
      automatic int range = (trial % 3 == 0) ? 8 : 1 << 20;
      bit picked [MS];
      bit got [MS];
      int nexp, ngot, t0, tfirst;
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      for (int g = 0; g * 8 < ntok; g++) begin
        ld_valid = 1; ld_base = 8'(g * 8);
        for (int i = 0; i < 8; i++) begin
          ld_mask[i] = (g * 8 + i) < ntok;
          scores[g*8+i] = $urandom_range(0, 2 * range) - range;
          ld_score[i] = 24'(scores[g*8+i]);
        end
        @(negedge clk);
      end
      ld_valid = 0;
      // reference: repeatedly take the best remaining (lowest index on ties)
      foreach (picked[i]) picked[i] = 0;
      nexp = (ntok < K) ? ntok : K;
      for (int k = 0; k < nexp; k++) begin
        automatic int best = -1;
        for (int i = 0; i < ntok; i++)
          if (!picked[i] && (best < 0 || scores[i] > scores[best])) best = i;
        picked[best] = 1;
      end
      foreach (got[i]) got[i] = 0;
      start = 1;
      @(negedge clk); start = 0;
      ngot = 0; tfirst = -1; t0 = 1;
      // sample at the falling edge: the values shown are the ones the next
      // rising edge consumes
      while (!done) begin
        out_ready = ($urandom_range(0, 3) != 0);
        #1;
        if (out_valid && tfirst < 0) tfirst = t0;
        if (out_valid && out_ready) begin
          checks++;
          if (!picked[out_idx] || got[out_idx]) failures++;
          got[out_idx] = 1;
          ngot++;
        end
        @(negedge clk);
        t0++;
      end
      out_ready = 0;
      checks += 2;
      if (ngot != nexp) begin failures++; $display("trial %0d got %0d exp %0d", trial, ngot, nexp); end
      if (tfirst != SW + 1) begin failures++; $display("first index after %0d cycles", tfirst + 1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
