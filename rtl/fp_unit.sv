// fp_unit: two-stage nonlinear and quantization unit (the paper's Floating
// Point Operation Unit), realised here in fixed point.
//
// Stage 1 (tile based) takes one 8-element tile per cycle, does the work that
// needs no global statistic and keeps the running reductions:
//   NL_QUANT   : y = x
//   NL_RMSNORM : y = x * gamma (gamma Q2.14), sum += x^2
//   NL_SOFTMAX : logit = x * in_scale / 2^8 (Q8.8), clipped to the static
//                maximum M_unified = 16; y = exp(logit - 16) in Q1.14
//                (as 2^(t*log2 e) with a 17-point interpolated table), sum += y
// and in every mode tracks max|y|. The tile results go back to the
// intermediate buffer.
// Finalisation (vector level) starts after the last tile: a 24-step restoring
// divider forms R = floor(127 * 2^16 / max|y|).
// Stage 2 (deferred scaling fused with quantization) re-reads the tiles and
// emits q = sat8(round(y * R / 2^16)). Because absmax quantization divides by
// the vector maximum, the deferred 1/RMS or 1/sum factor cancels in q and is
// not applied to the data: it is returned, with max|y|, as stat_sum/stat_max
// for the dequantization scale (max|y| / (127 * RMS) or max|y| / (127 * sum)).
// The two-stage split, the static maximum of 16 and absmax INT8 quantization
// come from the paper. Every number format (Q8.8 logits, Q1.14 exponentials,
// Q2.14 gamma), the exp approximation and the divider are this design's
// choices: the paper gives neither the formats nor the insides of this unit,
// and the unit does not implement IEEE floating point.
// Timing: stage 1 and stage 2 outputs are registered, one tile per cycle, one
// cycle latency. fin_done pulses 25 cycles after fin_start.
module fp_unit
  import vitallm_pkg::*;
#(
  parameter int unsigned N = ARR
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  nl_mode_e                  mode,
  input  logic [15:0]               in_scale,
  input  logic                      vec_start,     // clears the reductions
  input  logic                      s1_valid,
  input  logic signed [15:0]        s1_x     [N],
  input  logic signed [15:0]        s1_gamma [N],
  output logic                      s1_out_valid,
  output logic signed [15:0]        s1_y     [N],
  input  logic                      fin_start,
  output logic                      fin_busy,
  output logic                      fin_done,
  output logic [47:0]               stat_sum,
  output logic [15:0]               stat_max,
  input  logic                      s2_valid,
  input  logic signed [15:0]        s2_y     [N],
  output logic                      s2_out_valid,
  output logic signed [7:0]         s2_q     [N]
);
  localparam logic signed [31:0] MAXQ88 = 32'(M_UNIFIED) <<< 8;   // 16.0 in Q8.8
  localparam logic [15:0]        LOG2E  = 16'd47274;              // log2(e) in Q1.15

  function automatic logic [16:0] pow2_tab(input logic [4:0] i);
    unique case (i)
      5'd0:  return 17'd32768;  5'd1:  return 17'd34219;  5'd2:  return 17'd35734;
      5'd3:  return 17'd37316;  5'd4:  return 17'd38968;  5'd5:  return 17'd40693;
      5'd6:  return 17'd42495;  5'd7:  return 17'd44376;  5'd8:  return 17'd46341;
      5'd9:  return 17'd48393;  5'd10: return 17'd50535;  5'd11: return 17'd52773;
      5'd12: return 17'd55109;  5'd13: return 17'd57549;  5'd14: return 17'd60097;
      5'd15: return 17'd62757;  default: return 17'd65536;
    endcase
  endfunction

  // exp(logit - M_unified) in Q1.14 for a Q8.8 logit (entry i = 2^(i/16) in Q1.15).
  function automatic logic signed [15:0] exp_q14(input logic signed [31:0] logit);
    logic signed [31:0] t, u;
    logic signed [47:0] prod;
    logic signed [31:0] n;
    logic [7:0]  f;
    logic [16:0] lo, hi, m;
    int          s;
    t    = ((logit > MAXQ88) ? MAXQ88 : logit) - MAXQ88;    // <= 0, Q8.8
    prod = 48'(t) * $signed({1'b0, LOG2E});
    u    = 32'(prod >>> 15);                                 // t * log2(e), Q8.8
    n    = u >>> 8;                                          // floor, <= 0
    f    = u[7:0];
    lo   = pow2_tab({1'b0, f[7:4]});
    hi   = pow2_tab({1'b0, f[7:4]} + 5'd1);
    m    = lo + 17'(((hi - lo) * {13'd0, f[3:0]}) >> 4);     // 2^f, Q1.15
    s    = 1 - n;
    if (s > 17) return '0;
    return 16'(m >> s);
  endfunction

  // ---------------- stage 1 ----------------
  logic signed [15:0] y1 [N];
  logic [47:0]        sum_add;
  logic [15:0]        max_tile;

  always_comb begin
    sum_add  = '0;
    max_tile = '0;
    for (int i = 0; i < N; i++) begin
      logic signed [31:0] p;
      logic [15:0] a;
      unique case (mode)
        NL_RMSNORM: begin
          p = (32'(s1_x[i]) * 32'(s1_gamma[i]) + 32'sd8192) >>> 14;
          y1[i] = (p > 32'sd32767) ? 16'sd32767 : (p < -32'sd32767) ? -16'sd32767 : 16'(p);
          sum_add = sum_add + 48'(32'(s1_x[i]) * 32'(s1_x[i]));
        end
        NL_SOFTMAX: begin
          p = (32'(s1_x[i]) * $signed({16'd0, in_scale})) >>> 8;
          y1[i] = exp_q14(p);
          sum_add = sum_add + 48'(y1[i]);
        end
        default: y1[i] = (s1_x[i] == -16'sd32768) ? -16'sd32767 : s1_x[i];
      endcase
      a = y1[i][15] ? 16'(-y1[i]) : 16'(y1[i]);
      if (a > max_tile) max_tile = a;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_out_valid <= 1'b0;
      stat_sum     <= '0;
      stat_max     <= '0;
      for (int i = 0; i < N; i++) s1_y[i] <= '0;
    end else begin
      s1_out_valid <= s1_valid;
      if (vec_start) begin
        stat_sum <= '0;
        stat_max <= '0;
      end else if (s1_valid) begin
        stat_sum <= stat_sum + sum_add;
        if (max_tile > stat_max) stat_max <= max_tile;
        for (int i = 0; i < N; i++) s1_y[i] <= y1[i];
      end
    end
  end

  // ---------------- finalisation: R = floor(127 * 2^16 / max) ----------------
  localparam int unsigned QW = 24;
  logic [QW-1:0] quo, quo_next;
  logic [QW-1:0] rem;                 // always below stat_max
  logic [QW:0]   r2;                  // shifted partial remainder
  logic          ge;                  // this quotient bit is one
  logic [4:0]    step;
  logic [QW-1:0] recip;
  localparam logic [QW-1:0] DIVIDEND = QW'(127) << 16;

  always_comb begin
    r2       = {rem, DIVIDEND[step]};
    ge       = (stat_max != '0) && (r2 >= (QW+1)'(stat_max));
    quo_next = quo;
    quo_next[step] = ge;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fin_busy <= 1'b0;
      fin_done <= 1'b0;
      quo      <= '0;
      rem      <= '0;
      step     <= '0;
      recip    <= '0;
    end else begin
      fin_done <= 1'b0;
      if (fin_start && !fin_busy) begin
        fin_busy <= 1'b1;
        quo      <= '0;
        rem      <= '0;
        step     <= 5'(QW - 1);
      end else if (fin_busy) begin
        rem <= ge ? QW'(r2 - (QW+1)'(stat_max)) : QW'(r2);
        quo <= quo_next;
        if (step == '0) begin
          fin_busy <= 1'b0;
          fin_done <= 1'b1;
          recip    <= quo_next;       // zero when max|y| is zero
        end else begin
          step <= step - 1'b1;
        end
      end
    end
  end

  // ---------------- stage 2: fused deferred scaling and quantization ----------------
  logic signed [47:0] s2_p [N];
  always_comb
    for (int i = 0; i < N; i++)
      s2_p[i] = (48'(s2_y[i]) * $signed({24'd0, recip}) + 48'sd32768) >>> 16;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_out_valid <= 1'b0;
      for (int i = 0; i < N; i++) s2_q[i] <= '0;
    end else begin
      s2_out_valid <= s2_valid;
      if (s2_valid)
        for (int i = 0; i < N; i++)
          s2_q[i] <= (s2_p[i] > 48'sd127) ? 8'sd127 : (s2_p[i] < -48'sd127) ? -8'sd127 : 8'(s2_p[i]);
    end
  end
endmodule
