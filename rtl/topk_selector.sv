// topk_selector: comparison-free Top-K selector of the leading-one predictor.
//
// Scores arrive eight per cycle and are stored with their sign bit inverted,
// which turns signed order into unsigned order. Selection then walks the bit
// planes from the MSB down without comparing any two scores: with `cand` the
// still-undecided entries and `need` the places left, the entries of `cand`
// that have a 1 in the current plane are counted; if they all fit they are
// selected and removed from `cand`, otherwise `cand` shrinks to them. After
// the last plane the remaining candidates tie and the lowest indices fill the
// places left. The indices of the K selected entries are then streamed out in
// ascending order, one per accepted cycle. The counts and lowest-index
// searches are built as 64-entry chunks followed by a chunk-level combine;
// MAX_SEQ must therefore be at most 64 or a multiple of 64.
// The paper names a bitwise, comparison-free Top-K selector after a published
// sorter; this bit-plane elimination is this design's own realisation of it.
// Interface: clr empties the store; ld_valid writes ld_score[i] at index
// ld_base+i where ld_mask[i]; start begins selection of min(K, stored) entries;
// out_valid/out_ready/out_idx stream the result; done pulses after the last.
// Timing: SCORE_W cycles of bit-plane selection, then one index per cycle.
module topk_selector
  import vitallm_pkg::*;
#(
  parameter int unsigned N       = ARR,
  parameter int unsigned MAX_SEQ = 4096,
  parameter int unsigned K       = TOPK,
  parameter int unsigned SCORE_W = 24,
  localparam int unsigned IW     = $clog2(MAX_SEQ)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clr,
  input  logic                      ld_valid,
  input  logic [IW-1:0]             ld_base,
  input  logic [N-1:0]              ld_mask,
  input  logic signed [SCORE_W-1:0] ld_score [N],
  input  logic                      start,
  output logic                      busy,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [IW-1:0]             out_idx,
  output logic                      done
);
  typedef enum logic [1:0] {S_IDLE, S_PLANE, S_OUT} state_e;
  state_e state;

  logic [SCORE_W-1:0] key [MAX_SEQ];
  logic [MAX_SEQ-1:0] present, cand, sel;
  logic [$clog2(SCORE_W)-1:0] bitpos;
  logic [IW:0] need;   // places not yet filled by whole bit planes
  logic [IW:0] left;   // indices still to stream out

  logic [MAX_SEQ-1:0] ones;
  logic [IW:0] cnt, n_present;
  logic [IW-1:0] first_sel, first_cand;
  logic any_sel;

  // Population counts and lowest-index searches over MAX_SEQ entries are
  // split into CH-entry chunks (one small loop per chunk, then one loop over
  // the chunk results) so that no loop is longer than a synthesis front end
  // will unroll.
  localparam int unsigned CH  = (MAX_SEQ < 64) ? MAX_SEQ : 64;
  localparam int unsigned NCH = MAX_SEQ / CH;
  localparam int unsigned CW  = $clog2(CH + 1);
  localparam int unsigned XW  = $clog2(CH);

  if (MAX_SEQ % CH != 0 || CH < 2) begin : g_bad_size
    $error("topk_selector: MAX_SEQ must be 2..64 or a multiple of 64");
  end

  logic [CW-1:0] ch_cnt [NCH];
  logic [CW-1:0] ch_np  [NCH];
  logic [XW-1:0] ch_fsel [NCH];
  logic [XW-1:0] ch_fcand [NCH];
  logic [NCH-1:0] ch_any_sel;

  for (genvar b = 0; b < NCH; b++) begin : g_ch
    logic [CW-1:0] cnt_l, np_l;
    logic [XW-1:0] fsel_l, fcand_l;
    logic          any_l;
    for (genvar j = 0; j < CH; j++) begin : g_bit
      assign ones[b*CH + j] = cand[b*CH + j] & key[b*CH + j][bitpos];
    end
    always_comb begin
      cnt_l = '0;
      np_l  = '0;
      for (int j = 0; j < CH; j++) begin
        cnt_l = cnt_l + CW'(ones[b*CH + j]);
        np_l  = np_l + CW'(present[b*CH + j]);
      end
      fsel_l  = '0;
      fcand_l = '0;
      any_l   = 1'b0;
      for (int j = CH-1; j >= 0; j--) begin
        if (sel[b*CH + j])  begin fsel_l = XW'(j); any_l = 1'b1; end
        if (cand[b*CH + j]) fcand_l = XW'(j);
      end
    end
    assign ch_cnt[b]     = cnt_l;
    assign ch_np[b]      = np_l;
    assign ch_fsel[b]    = fsel_l;
    assign ch_fcand[b]   = fcand_l;
    assign ch_any_sel[b] = any_l;
  end

  always_comb begin
    cnt = '0;
    n_present = '0;
    for (int b = 0; b < NCH; b++) begin
      cnt       = cnt + (IW+1)'(ch_cnt[b]);
      n_present = n_present + (IW+1)'(ch_np[b]);
    end
    first_sel  = '0;
    first_cand = '0;
    any_sel    = 1'b0;
    for (int b = NCH-1; b >= 0; b--) begin
      if (ch_any_sel[b]) begin
        first_sel = IW'(b*CH) + IW'(ch_fsel[b]);
        any_sel   = 1'b1;
      end
      if (cand[b*CH +: CH] != '0) first_cand = IW'(b*CH) + IW'(ch_fcand[b]);
    end
  end

  always_ff @(posedge clk) begin
    if (ld_valid)
      for (int i = 0; i < N; i++)
        if (ld_mask[i]) key[ld_base + IW'(i)] <= {~ld_score[i][SCORE_W-1], ld_score[i][SCORE_W-2:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      present <= '0;
      cand    <= '0;
      sel     <= '0;
      bitpos  <= '0;
      need    <= '0;
      left    <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (clr) present <= '0;
      else if (ld_valid)
        for (int i = 0; i < N; i++) if (ld_mask[i]) present[ld_base + IW'(i)] <= 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          cand   <= present;
          sel    <= '0;
          need   <= (n_present < (IW+1)'(K)) ? n_present : (IW+1)'(K);
          left   <= (n_present < (IW+1)'(K)) ? n_present : (IW+1)'(K);
          bitpos <= ($clog2(SCORE_W))'(SCORE_W-1);
          state  <= S_PLANE;
        end
        S_PLANE: begin
          if (cnt <= need) begin
            sel  <= sel | ones;
            cand <= cand & ~ones;
            need <= need - cnt;
          end else begin
            cand <= ones;
          end
          if (bitpos == '0) state <= (left == '0) ? S_IDLE : S_OUT;
          if (bitpos == '0 && left == '0) done <= 1'b1;
          else              bitpos <= bitpos - 1'b1;
        end
        S_OUT: if (out_ready) begin
          if (any_sel) sel[first_sel]   <= 1'b0;
          else         cand[first_cand] <= 1'b0;
          left <= left - 1'b1;
          if (left == (IW+1)'(1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign out_valid = (state == S_OUT);
  assign out_idx   = any_sel ? first_sel : first_cand;
  assign busy      = (state != S_IDLE);
endmodule
