// tb_leading_one_detector: exhaustive check of all 256 INT8 inputs against
// sign and floor(log2|x|) computed with a real-valued reference.
module tb_leading_one_detector;
  import vitallm_pkg::*;
  logic signed [7:0] x [8];
  logic [3:0] lo [8];
  int checks = 0, failures = 0;

  leading_one_detector dut (.*);

  initial begin
    for (int v = -128; v < 128; v += 8) begin
      for (int i = 0; i < 8; i++) x[i] = 8'(v + i);
      #1;
      for (int i = 0; i < 8; i++) begin
        automatic int a = (v + i < 0) ? -(v + i) : (v + i);
        automatic int e = (a == 0) ? 0 : int'($floor($ln(real'(a)) / $ln(2.0) + 1e-9));
        automatic logic [3:0] expv = {1'((v + i) < 0), 3'(e)};
        checks++;
        if (lo[i] !== expv) begin
          failures++;
          $display("x=%0d got %b exp %b", v + i, lo[i], expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
