// tb_intermediate_buffer: masked 32-lane row writes and 8-lane quarter reads
// on both read ports, checked against a lane-level reference model.
module tb_intermediate_buffer;
  import vitallm_pkg::*;
  localparam int ROWS = 1372;
  logic clk = 0;
  logic we, rea, reb;
  logic [10:0] wrow, rrowa, rrowb;
  logic [31:0] wmask;
  logic [1:0] rqa, rqb;
  logic signed [15:0] wdata [32], rdataa [8], rdatab [8];
  logic [15:0] model [ROWS][32];
  int checks = 0, failures = 0;

  intermediate_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; rea = 0; reb = 0; wrow = 0; rrowa = 0; rrowb = 0; wmask = 0; rqa = 0; rqb = 0;
    foreach (wdata[i]) wdata[i] = 0;
    // full writes of a set of rows
    for (int r = 0; r < ROWS; r += 37) begin
      @(negedge clk);
      we = 1; wrow = 11'(r); wmask = '1;
      foreach (wdata[i]) begin wdata[i] = 16'($urandom); model[r][i] = wdata[i]; end
    end
    // partial writes
    for (int k = 0; k < 200; k++) begin
      automatic int r = 37 * $urandom_range(0, (ROWS - 1) / 37);
      @(negedge clk);
      we = 1; wrow = 11'(r); wmask = $urandom;
      foreach (wdata[i]) begin
        wdata[i] = 16'($urandom);
        if (wmask[i]) model[r][i] = wdata[i];
      end
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 400; k++) begin
      automatic int ra = 37 * $urandom_range(0, (ROWS - 1) / 37), rb = 37 * $urandom_range(0, (ROWS - 1) / 37);
      automatic int qa = $urandom_range(0, 3), qb = $urandom_range(0, 3);
      @(negedge clk);
      rea = 1; rrowa = 11'(ra); rqa = 2'(qa);
      reb = 1; rrowb = 11'(rb); rqb = 2'(qb);
      @(negedge clk);
      rea = 0; reb = 0;
      for (int i = 0; i < 8; i++) begin
        checks += 2;
        if (rdataa[i] !== model[ra][8*qa + i]) failures++;
        if (rdatab[i] !== model[rb][8*qb + i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
