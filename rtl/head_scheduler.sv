// head_scheduler: dependency-aware issue control of the accelerator.
//
// It decides when a projection command (TINT cores, the producer) and an
// attention command (BoothFlex core in INT8 mode, the consumer) may start:
//  * Head-level pipelining: a projection marked `produce` computes Q/K/V of
//    one head; attention of a head may start (head_first) only once that head
//    is produced, and the head's buffer slot is freed when its last attention
//    command (head_last) completes. Only SLOTS = 2 heads (one being produced,
//    one being consumed) may be buffered, so the projection of head h runs
//    while attention of head h-1 runs, and waits if it would get further
//    ahead.
//  * Dual-core sharing: a projection marked `use_bf` (output projection and
//    FFN) borrows the BoothFlex core in ternary mode; it waits while attention
//    holds the core, and attention waits while the projection holds it.
//    Attention has priority when both ask in the same cycle.
//  * Q-friendly barrier: a projection marked `wait_q` starts only after the
//    nonlinear unit has finished quantizing the previous vector.
// The three rules are the paper's; the command flags, the credit counters and
// the priority are this design's way of enforcing them.
// Timing: p_go / a_go are combinational grants in the cycle the command is
// presented; *_busy must rise the cycle after a grant.
module head_scheduler
  import vitallm_pkg::*;
#(
  parameter int unsigned SLOTS = 2
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     p_cmd_valid,
  input  logic     p_produce,
  input  logic     p_use_bf,
  input  logic     p_wait_q,
  input  logic     p_busy,
  input  logic     p_done,
  output logic     p_go,
  input  logic     a_cmd_valid,
  input  logic     a_head_first,
  input  logic     a_head_last,
  input  logic     a_busy,
  input  logic     a_done,
  output logic     a_go,
  input  logic     nl_done,
  output bf_mode_e bf_mode,
  output logic     ev_head_credit_stall,
  output logic     ev_attn_head_wait,
  output logic     ev_overlap,
  output logic     ev_bf_to_ternary,
  output logic     ev_bf_to_int8,
  output logic     ev_bf_busy_stall,
  output logic     ev_quant_barrier
);
  logic [1:0] slots;         // heads produced or in production, not yet released
  logic [1:0] ready_heads;   // heads produced, attention not yet started
  logic       p_producing, p_bf_held, a_last_inflight;
  logic       vec_ready;

  logic p_free, a_free, credit_ok, barrier_ok, bf_ok;

  assign a_free = a_cmd_valid && !a_busy;
  assign a_go   = a_free && !p_bf_held && !(a_head_first && ready_heads == '0);

  assign p_free     = p_cmd_valid && !p_busy;
  assign credit_ok  = !p_produce || (slots < 2'(SLOTS));
  assign barrier_ok = !p_wait_q || vec_ready;
  assign bf_ok      = !p_use_bf || (!a_busy && !a_go);
  assign p_go       = p_free && credit_ok && barrier_ok && bf_ok;

  assign ev_head_credit_stall = p_free && !credit_ok;
  assign ev_quant_barrier     = p_free && !barrier_ok;
  assign ev_bf_busy_stall     = p_free && !bf_ok;
  assign ev_attn_head_wait    = a_free && a_head_first && ready_heads == '0;
  assign ev_overlap           = p_busy && a_busy;
  assign ev_bf_to_ternary     = p_go && p_use_bf && bf_mode == BF_INT8;
  assign ev_bf_to_int8        = a_go && bf_mode == BF_TERNARY;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slots           <= '0;
      ready_heads     <= '0;
      p_producing     <= 1'b0;
      p_bf_held       <= 1'b0;
      a_last_inflight <= 1'b0;
      vec_ready       <= 1'b0;
      bf_mode         <= BF_INT8;
    end else begin
      slots <= slots + 2'(p_go && p_produce) - 2'(a_done && a_last_inflight);
      ready_heads <= ready_heads + 2'(p_done && p_producing) - 2'(a_go && a_head_first);
      if (p_go) begin
        p_producing <= p_produce;
        p_bf_held   <= p_use_bf;
      end else if (p_done) begin
        p_producing <= 1'b0;
        p_bf_held   <= 1'b0;
      end
      if (a_go)        a_last_inflight <= a_head_last;
      else if (a_done) a_last_inflight <= 1'b0;
      if (p_go && p_wait_q) vec_ready <= 1'b0;
      else if (nl_done)     vec_ready <= 1'b1;
      if (p_go && p_use_bf) bf_mode <= BF_TERNARY;
      else if (a_go)        bf_mode <= BF_INT8;
    end
  end

  // Slot accounting must never leave its range.
  a_slots: assert property (@(posedge clk) disable iff (!rst_n) slots <= 2'(SLOTS));
  a_ready: assert property (@(posedge clk) disable iff (!rst_n) ready_heads <= slots);
endmodule
