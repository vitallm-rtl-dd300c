// tb_head_scheduler: surrounds the dependency scheduler with two simple engine
// models (a projection engine and an attention engine that stay busy for a
// programmed number of cycles) and walks through each scheduling rule:
//  * attention on a head that has not been produced waits (head wait);
//  * production of a third head waits for a free head slot (credit stall);
//  * projection and attention on different heads run at the same time;
//  * a projection that borrows the Booth array waits while attention uses
//    it, switches the array to ternary mode, and attention then waits for it
//    and switches it back to INT8;
//  * a projection that needs the next quantized vector waits for the
//    nonlinear unit (vector barrier).
// Every go decision is checked against the expected cycle.
module tb_head_scheduler;
  import vitallm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic p_cmd_valid, p_produce, p_use_bf, p_wait_q, p_busy, p_done, p_go;
  logic a_cmd_valid, a_head_first, a_head_last, a_busy, a_done, a_go, nl_done;
  bf_mode_e bf_mode;
  logic ev_head_credit_stall, ev_attn_head_wait, ev_overlap, ev_bf_to_ternary,
        ev_bf_to_int8, ev_bf_busy_stall, ev_quant_barrier;
  int checks = 0, failures = 0;
  int p_len = 10, a_len = 10, p_cnt = 0, a_cnt = 0;
  int n_credit = 0, n_wait = 0, n_overlap = 0, n_tern = 0, n_int8 = 0, n_bfst = 0, n_barrier = 0;

  head_scheduler dut (.*);
  always #5 clk = ~clk;

  // engine models: busy from the cycle after go for *_len cycles, done pulse
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_cnt <= 0; a_cnt <= 0; p_done <= 0; a_done <= 0;
    end else begin
      p_done <= 0; a_done <= 0;
      if (p_go) p_cnt <= p_len;
      else if (p_cnt > 0) begin p_cnt <= p_cnt - 1; if (p_cnt == 1) p_done <= 1; end
      if (a_go) a_cnt <= a_len;
      else if (a_cnt > 0) begin a_cnt <= a_cnt - 1; if (a_cnt == 1) a_done <= 1; end
    end
  end
  assign p_busy = (p_cnt > 0) || p_done;
  assign a_busy = (a_cnt > 0) || a_done;

  always @(posedge clk) if (rst_n) begin
    n_credit += ev_head_credit_stall; n_wait += ev_attn_head_wait; n_overlap += ev_overlap;
    n_tern += ev_bf_to_ternary; n_int8 += ev_bf_to_int8; n_bfst += ev_bf_busy_stall;
    n_barrier += ev_quant_barrier;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // issue a projection command and return the number of cycles until go
  task automatic issue_p(input bit prod, input bit bf, input bit wq, output int waited);
    @(negedge clk);
    p_cmd_valid = 1; p_produce = prod; p_use_bf = bf; p_wait_q = wq;
    waited = 0;
    #1;
    while (!p_go) begin @(negedge clk); waited++; end
    @(negedge clk);
    p_cmd_valid = 0;
  endtask
  task automatic issue_a(input bit hf, input bit hl, output int waited);
    @(negedge clk);
    a_cmd_valid = 1; a_head_first = hf; a_head_last = hl;
    waited = 0;
    #1;
    while (!a_go) begin @(negedge clk); waited++; end
    @(negedge clk);
    a_cmd_valid = 0;
  endtask

  initial begin
    int w, wa;
    p_cmd_valid = 0; p_produce = 0; p_use_bf = 0; p_wait_q = 0;
    a_cmd_valid = 0; a_head_first = 0; a_head_last = 0; nl_done = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check(bf_mode == BF_INT8, "reset mode");
    // 1. attention waits for head 0 while head 0 is projected
    fork
      issue_a(1, 0, wa);
      begin repeat (3) @(negedge clk); issue_p(1, 0, 0, w); end
    join
    check(w == 0, "first produce waits");
    // attention may start only after the projection finished (3 + 1 + 10 + done)
    check(wa >= 13, $sformatf("attention started too early (%0d)", wa));
    // 2. head 1 produced while attention on head 0 runs (overlap)
    issue_p(1, 0, 0, w);
    check(w == 0, "second produce waits");
    // last attention command of head 0 still to come; slot count is 2
    // 3. third head must wait for the release of head 0
    fork
      issue_p(1, 0, 0, w);
      begin repeat (25) @(negedge clk); issue_a(0, 1, wa); end
    join
    check(w >= 25, $sformatf("third head did not wait for a slot (%0d)", w));
    repeat (15) @(negedge clk);
    // 4. borrowed Booth array: attention on head 1 busy, projection with BF waits
    fork
      issue_a(1, 1, wa);
      begin repeat (2) @(negedge clk); issue_p(0, 1, 0, w); end
    join
    check(w >= 6, $sformatf("BF projection did not wait (%0d)", w));
    @(negedge clk);
    check(bf_mode == BF_TERNARY, "array not in ternary mode");
    issue_a(1, 1, wa);
    check(wa >= 5, $sformatf("attention did not wait for the array (%0d)", wa));
    check(bf_mode == BF_INT8, "array not back in INT8 mode");
    repeat (15) @(negedge clk);
    // 5. vector barrier
    fork
      issue_p(0, 0, 1, w);
      begin repeat (7) @(negedge clk); nl_done = 1; @(negedge clk); nl_done = 0; end
    join
    check(w == 7, $sformatf("barrier released after %0d", w));
    repeat (12) @(negedge clk);
    fork
      issue_p(0, 0, 1, w);
      begin repeat (4) @(negedge clk); nl_done = 1; @(negedge clk); nl_done = 0; end
    join
    check(w == 4, $sformatf("second barrier released after %0d", w));
    repeat (12) @(negedge clk);
    check(n_credit > 0, "no credit stall"); check(n_wait > 0, "no head wait");
    check(n_overlap > 0, "no overlap"); check(n_tern > 0, "no switch to ternary");
    check(n_int8 > 0, "no switch to INT8"); check(n_bfst > 0, "no BF stall");
    check(n_barrier > 0, "no barrier stall");
    $display("events credit=%0d wait=%0d overlap=%0d tern=%0d int8=%0d bfstall=%0d barrier=%0d",
             n_credit, n_wait, n_overlap, n_tern, n_int8, n_bfst, n_barrier);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
