// tb_weight_unpack: checks the unpacking LUT bank against a base-3 reference.
// Random packed bytes (including the unused codes 243..255) are applied every
// cycle; each output trit must equal the reference digit one cycle later.
module tb_weight_unpack;
  import vitallm_pkg::*;
  localparam int NL = 52;
  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [7:0] in_bytes [NL];
  logic out_valid;
  logic [1:0] out_trits [NL*5];
  int checks = 0, failures = 0;

  weight_unpack #(.NL(NL)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [1:0] ref_trit(input int b, input int i);
    automatic int v = b;
    if (b > 242) return 2'b00;
    for (int k = 0; k < i; k++) v = v / 3;
    case (v % 3)
      0: return 2'b11;   // -1
      1: return 2'b00;   //  0
      default: return 2'b01; // +1
    endcase
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] prev [NL];
    in_valid = 0;
    foreach (in_bytes[i]) in_bytes[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      in_valid = 1;
      foreach (in_bytes[i]) in_bytes[i] = (it < 256) ? 8'((it + i) % 256) : 8'($urandom);
      prev = in_bytes;
      @(posedge clk); #1;
      checks++;
      if (!out_valid) failures++;
      for (int g = 0; g < NL; g++)
        for (int t = 0; t < 5; t++) begin
          checks++;
          if (out_trits[g*5+t] !== ref_trit(int'(prev[g]), t)) begin
            failures++;
            if (failures < 10) $display("mismatch byte %0d trit %0d", prev[g], t);
          end
        end
    end
    @(negedge clk); in_valid = 0;
    @(posedge clk); #1;
    checks++; if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
