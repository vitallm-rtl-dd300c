// tb_quantized_buffer: writes random rows into all three banks and reads them
// back through both read ports (one-cycle registered read), checking data,
// bank separation and that a read without its enable holds the old value.
module tb_quantized_buffer;
  import vitallm_pkg::*;
  localparam int ROWS = 1088;
  logic clk = 0;
  logic we, re1, re2;
  logic [1:0] wbank, rbank1, rbank2;
  logic [10:0] wrow, rrow1, rrow2;
  logic signed [7:0] wdata [8], rdata1 [8], rdata2 [8];
  logic [63:0] model [3][ROWS];
  int checks = 0, failures = 0;

  quantized_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] pack(input logic signed [7:0] d [8]);
    logic [63:0] r;
    for (int i = 0; i < 8; i++) r[8*i +: 8] = d[i];
    return r;
  endfunction

  initial begin
    we = 0; re1 = 0; re2 = 0; wbank = 0; rbank1 = 0; rbank2 = 0; wrow = 0; rrow1 = 0; rrow2 = 0;
    foreach (wdata[i]) wdata[i] = 0;
    for (int b = 0; b < 3; b++)
      for (int r = 0; r < ROWS; r += 17) begin
        @(negedge clk);
        we = 1; wbank = 2'(b); wrow = 11'(r);
        foreach (wdata[i]) wdata[i] = 8'($urandom);
        model[b][r] = pack(wdata);
      end
    // last row of each bank
    for (int b = 0; b < 3; b++) begin
      @(negedge clk);
      we = 1; wbank = 2'(b); wrow = 11'(ROWS - 1);
      foreach (wdata[i]) wdata[i] = 8'($urandom);
      model[b][ROWS-1] = pack(wdata);
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 400; k++) begin
      automatic int b1 = $urandom_range(0, 2), b2 = $urandom_range(0, 2);
      automatic int r1 = 17 * $urandom_range(0, (ROWS - 1) / 17), r2 = (k % 7 == 0) ? ROWS - 1 : 17 * $urandom_range(0, (ROWS - 1) / 17);
      @(negedge clk);
      re1 = 1; rbank1 = 2'(b1); rrow1 = 11'(r1);
      re2 = 1; rbank2 = 2'(b2); rrow2 = 11'(r2);
      @(negedge clk);
      re1 = 0; re2 = 0; rrow1 = 0; rrow2 = 0;
      checks += 2;
      if (pack(rdata1) !== model[b1][r1]) failures++;
      if (pack(rdata2) !== model[b2][r2]) failures++;
      @(negedge clk);
      checks++;
      if (pack(rdata1) !== model[b1][r1]) failures++;   // held without enable
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
