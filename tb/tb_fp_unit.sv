// tb_fp_unit: runs whole vectors through the two-stage nonlinear unit in all
// three modes and checks
//  * stage 1: RMSNorm products and the sum of squares exactly, softmax
//    exponentials against a real-valued exp() (1% + 2 LSB tolerance), the
//    running max|y|, one tile per cycle with one cycle latency;
//  * finalisation: fin_done exactly 25 cycles after fin_start;
//  * stage 2: INT8 codes against real-valued round(127 * y / max|y|),
//    within one code, and exact saturation to +-127.
module tb_fp_unit;
  import vitallm_pkg::*;
  logic clk = 0, rst_n = 0;
  nl_mode_e mode;
  logic [15:0] in_scale;
  logic vec_start, s1_valid, s1_out_valid, fin_start, fin_busy, fin_done, s2_valid, s2_out_valid;
  logic signed [15:0] s1_x [8], s1_gamma [8], s1_y [8], s2_y [8];
  logic [47:0] stat_sum;
  logic [15:0] stat_max;
  logic signed [7:0] s2_q [8];
  int checks = 0, failures = 0;

  fp_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic run_vec(input nl_mode_e m, input int ntiles);
    logic signed [15:0] ys [$];
    automatic longint sum_ref = 0;
    automatic int max_ref = 0;
    int cyc;
    @(negedge clk);
    mode = m; vec_start = 1;
    in_scale = 16'($urandom_range(64, 1024));
    @(negedge clk);
    vec_start = 0;
    for (int t = 0; t < ntiles; t++) begin
      s1_valid = 1;
      foreach (s1_x[i]) begin
        s1_x[i] = (m == NL_SOFTMAX) ? 16'($urandom_range(0, 8000) - 2000) : 16'($urandom);
        s1_gamma[i] = 16'($urandom_range(0, 32767) - 16384);
      end
      if (t == 0 && m == NL_QUANT) s1_x[0] = -16'sd32768;
      @(negedge clk);
      check(s1_out_valid, "s1 latency");
      for (int i = 0; i < 8; i++) begin
        real yr;
        int expy;
        case (m)
          NL_RMSNORM: begin
            automatic longint p = (longint'(s1_x[i]) * longint'(s1_gamma[i]) + 8192) >>> 14;
            expy = (p > 32767) ? 32767 : (p < -32767) ? -32767 : int'(p);
            check(s1_y[i] == 16'(expy), $sformatf("rms y %0d exp %0d", s1_y[i], expy));
            sum_ref += longint'(s1_x[i]) * longint'(s1_x[i]);
          end
          NL_SOFTMAX: begin
            automatic longint p = (longint'(s1_x[i]) * longint'(in_scale)) >>> 8;
            automatic real l = real'(p) / 256.0;
            if (l > 16.0) l = 16.0;
            yr = $exp(l - 16.0) * 16384.0;
            check(rabs(real'(s1_y[i]) - yr) <= yr * 0.01 + 2.0,
                  $sformatf("exp y %0d exp %f", s1_y[i], yr));
            expy = s1_y[i];
            sum_ref += longint'(s1_y[i]);
          end
          default: begin
            expy = (s1_x[i] == -16'sd32768) ? -32767 : int'(s1_x[i]);
            check(s1_y[i] == 16'(expy), "quant pass");
          end
        endcase
        if ((expy < 0 ? -expy : expy) > max_ref) max_ref = (expy < 0 ? -expy : expy);
        ys.push_back(s1_y[i]);
      end
    end
    s1_valid = 0;
    @(negedge clk);
    check(stat_max == 16'(max_ref), $sformatf("max %0d exp %0d", stat_max, max_ref));
    if (m != NL_QUANT) check(stat_sum == 48'(sum_ref), "sum");
    fin_start = 1;
    cyc = 0;
    @(negedge clk);
    fin_start = 0;
    cyc = 1;
    while (!fin_done && cyc < 100) begin @(negedge clk); cyc++; end
    check(cyc == 25, $sformatf("finalisation took %0d cycles", cyc));
    for (int t = 0; t < ntiles; t++) begin
      s2_valid = 1;
      for (int i = 0; i < 8; i++) s2_y[i] = ys[t*8+i];
      @(negedge clk);
      check(s2_out_valid, "s2 latency");
      for (int i = 0; i < 8; i++) begin
        automatic real qr = (max_ref == 0) ? 0.0 : 127.0 * real'(ys[t*8+i]) / real'(max_ref);
        check(rabs(real'(s2_q[i]) - qr) <= 1.0, $sformatf("q %0d exp %f", s2_q[i], qr));
        check(s2_q[i] <= 127 && s2_q[i] >= -127, "q range");
      end
    end
    s2_valid = 0;
  endtask

  initial begin
    mode = NL_QUANT; in_scale = 0; vec_start = 0; s1_valid = 0; fin_start = 0; s2_valid = 0;
    foreach (s1_x[i]) begin s1_x[i] = 0; s1_gamma[i] = 0; s2_y[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 20; k++) begin
      run_vec(NL_RMSNORM, 1 + $urandom_range(0, 20));
      run_vec(NL_SOFTMAX, 1 + $urandom_range(0, 20));
      run_vec(NL_QUANT, 1 + $urandom_range(0, 20));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
