// vitallm_top: ternary LLM accelerator - compute cores, buffers and issue control.
//
// Blocks and buses follow the paper's top-level figure: packed weights enter
// from external memory (52 x 8 b per cycle) through the unpacking LUTs
// (52 x 10 b) to three TINT cores and the BoothFlex core; the quantized buffer
// broadcasts 8 INT8 activations (1 x 64 b) to them; the four accumulators
// write 32 x 16 b rows into the intermediate buffer; the nonlinear unit reads
// 8 x 16 b tiles from it and writes 8 x 8 b quantized tiles into the
// quantized buffer; the LOP core reads the query from the intermediate buffer
// and exchanges leading-one data and selected indices with external memory.
//
// Four command engines run the datapath, each taking one command at a time
// through a valid/ready port (formats in vitallm_pkg):
//   P  projection : ternary GEMV, input vector from the quantized buffer,
//                   weights streamed in, 24 outputs per group (TINT cores) or
//                   32 when the BoothFlex core assists in ternary mode.
//   A  attention  : INT8 GEMV on the BoothFlex core (QK^T or SV), INT8 vector
//                   from the quantized buffer, K or V tiles (8 x 8 INT8)
//                   streamed in, 8 outputs per group, 5 cycles per tile.
//   N  nonlinear  : two-stage RMSNorm / softmax / quantization of a vector in
//                   the intermediate buffer into a quantized-buffer bank.
//   L  prediction : leading-one codes of the query, surrogate scores of up to
//                   MAX_SEQ keys whose codes are streamed in, Top-K indices out.
// head_scheduler gates P and A (head-level pipelining with two head slots,
// BoothFlex ownership, quantization barrier). Intermediate-buffer writes are
// arbitrated N > P > A; a refused writer holds its result and retries.
// The engines, command formats, the separate INT8 K/V and gamma input streams
// and the arbitration are this design's choices: the paper gives the blocks,
// buses and schedules, not a control interface. Where a stream comes from
// (DRAM, a host) is outside this design.
module vitallm_top
  import vitallm_pkg::*;
#(
  parameter int unsigned QB_ROWS = 1088,
  parameter int unsigned IB_ROWS = 1372,
  parameter int unsigned MAX_SEQ = 4096,
  parameter int unsigned DTILES  = 16,
  localparam int unsigned QRW    = $clog2(QB_ROWS),
  localparam int unsigned IRW    = $clog2(IB_ROWS),
  localparam int unsigned IW     = $clog2(MAX_SEQ),
  localparam int unsigned DW     = $clog2(DTILES)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host load of the quantized buffer (only while the N engine is idle)
  input  logic                     host_qb_we,
  input  logic [1:0]               host_qb_bank,
  input  logic [QRW-1:0]           host_qb_row,
  input  logic signed [7:0]        host_qb_data [ARR],
  // commands
  input  logic                     p_cmd_valid,
  input  proj_cmd_t                p_cmd,
  output logic                     p_cmd_ready,
  input  logic                     a_cmd_valid,
  input  attn_cmd_t                a_cmd,
  output logic                     a_cmd_ready,
  input  logic                     n_cmd_valid,
  input  nl_cmd_t                  n_cmd,
  output logic                     n_cmd_ready,
  input  logic                     l_cmd_valid,
  input  lop_cmd_t                 l_cmd,
  output logic                     l_cmd_ready,
  // external memory streams
  input  logic                     w_valid,
  input  logic [7:0]               w_bytes  [N_LUT],
  output logic                     w_ready,
  input  logic                     kv_valid,
  input  logic [7:0]               kv_data  [ARR][ARR],
  output logic                     kv_ready,
  input  logic                     klo_valid,
  input  logic [LO_W-1:0]          klo_data [ARR][ARR],
  output logic                     klo_ready,
  input  logic                     g_valid,
  input  logic signed [15:0]       g_data   [ARR],
  output logic                     g_ready,
  output logic                     idx_valid,
  output logic [IW-1:0]            idx,
  input  logic                     idx_ready,
  // status
  output logic                     p_done,
  output logic                     a_done,
  output logic                     n_done,
  output logic                     l_done,
  output logic [47:0]              nl_stat_sum,
  output logic [15:0]              nl_stat_max,
  output events_t                  events
);
  // ------------------------------------------------------------------
  // shared datapath signals
  // ------------------------------------------------------------------
  logic              qb_we;
  logic [1:0]        qb_wbank;
  logic [QRW-1:0]    qb_wrow;
  logic signed [7:0] qb_wdata [ARR];
  logic              qb_re1, qb_re2;
  logic [1:0]        qb_rbank1, qb_rbank2;
  logic [QRW-1:0]    qb_rrow1, qb_rrow2;
  logic signed [7:0] qb_rdata1 [ARR];
  logic signed [7:0] qb_rdata2 [ARR];

  logic              ib_we;
  logic [IRW-1:0]    ib_wrow;
  logic [IB_LANES-1:0] ib_wmask;
  logic signed [PSUM_W-1:0] ib_wdata [IB_LANES];
  logic              ib_rea, ib_reb;
  logic [IRW-1:0]    ib_rrowa, ib_rrowb;
  logic [1:0]        ib_rqa, ib_rqb;
  logic signed [PSUM_W-1:0] ib_rdataa [ARR];
  logic signed [PSUM_W-1:0] ib_rdatab [ARR];

  logic              wu_in_valid, wu_out_valid;
  logic [1:0]        trits [N_LUT*5];

  logic              tint_valid, tint_first;
  logic [1:0]        tint_w [N_TINT][ARR][ARR];
  logic signed [PSUM_W-1:0] tint_psum [N_TINT][ARR];

  logic              bf_in_valid, bf_in_ready, bf_acc_clr, bf_busy;
  bf_mode_e          bf_mode_in;
  logic [7:0]        bf_mult [ARR][ARR];
  logic signed [7:0] bf_mcand [ARR];
  logic signed [PSUM_W-1:0] bf_acc [ARR];

  logic p_go, a_go;
  logic ev_credit, ev_hwait, ev_overlap, ev_to_t, ev_to_i, ev_bfstall, ev_barrier;
  bf_mode_e sched_bf_mode;

  // ------------------------------------------------------------------
  // memories and cores
  // ------------------------------------------------------------------
  quantized_buffer #(.BANKS(3), .ROWS(QB_ROWS)) u_qbuf (
    .clk, .we(qb_we), .wbank(qb_wbank), .wrow(qb_wrow), .wdata(qb_wdata),
    .re1(qb_re1), .rbank1(qb_rbank1), .rrow1(qb_rrow1), .rdata1(qb_rdata1),
    .re2(qb_re2), .rbank2(qb_rbank2), .rrow2(qb_rrow2), .rdata2(qb_rdata2));

  intermediate_buffer #(.ROWS(IB_ROWS), .LANES(IB_LANES)) u_ibuf (
    .clk, .we(ib_we), .wrow(ib_wrow), .wmask(ib_wmask), .wdata(ib_wdata),
    .rea(ib_rea), .rrowa(ib_rrowa), .rqa(ib_rqa), .rdataa(ib_rdataa),
    .reb(ib_reb), .rrowb(ib_rrowb), .rqb(ib_rqb), .rdatab(ib_rdatab));

  weight_unpack #(.NL(N_LUT)) u_unpack (
    .clk, .rst_n, .in_valid(wu_in_valid), .in_bytes(w_bytes),
    .out_valid(wu_out_valid), .out_trits(trits));

  for (genvar k = 0; k < N_TINT; k++) begin : g_tint
    for (genvar r = 0; r < ARR; r++) begin : g_r
      for (genvar c = 0; c < ARR; c++) begin : g_c
        assign tint_w[k][r][c] = trits[k*ARR*ARR + r*ARR + c];
      end
    end
    tint_core u_tint (
      .clk, .rst_n, .in_valid(tint_valid), .first(tint_first),
      .act(qb_rdata1), .w(tint_w[k]), .psum(tint_psum[k]));
  end

  boothflex_core u_bf (
    .clk, .rst_n, .in_valid(bf_in_valid), .in_ready(bf_in_ready), .mode(bf_mode_in),
    .mult(bf_mult), .mcand(bf_mcand), .acc_clr(bf_acc_clr), .busy(bf_busy), .acc(bf_acc));

  // ------------------------------------------------------------------
  // P engine: ternary projection
  // ------------------------------------------------------------------
  typedef enum logic [1:0] {P_IDLE, P_RUN, P_DRAIN, P_WR} p_state_e;
  p_state_e   p_state;
  proj_cmd_t  pc;
  logic [10:0] p_t, p_g;
  logic        p_feed_v, p_feed_first;
  logic        p_wr_req, p_wr_gnt;
  logic        p_issue;

  assign p_issue  = (p_state == P_RUN) && w_valid;
  assign w_ready  = (p_state == P_RUN);
  assign wu_in_valid = p_issue;
  assign qb_re1   = p_issue;
  assign qb_rbank1 = pc.src_bank;
  assign qb_rrow1 = QRW'(pc.src_row + p_t);
  assign tint_valid = p_feed_v;
  assign tint_first = p_feed_first;
  assign p_wr_req = (p_state == P_WR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_state <= P_IDLE;
      pc      <= '0;
      p_t     <= '0;
      p_g     <= '0;
      p_feed_v <= 1'b0;
      p_feed_first <= 1'b0;
      p_done  <= 1'b0;
    end else begin
      p_done   <= 1'b0;
      p_feed_v <= p_issue;
      p_feed_first <= p_issue && (p_t == '0);
      unique case (p_state)
        P_IDLE: if (p_go) begin
          pc <= p_cmd;
          p_t <= '0;
          p_g <= '0;
          p_state <= P_RUN;
        end
        P_RUN: if (p_issue) begin
          if (p_t == pc.n_in - 11'd1) begin
            p_state <= P_DRAIN;
          end else begin
            p_t <= p_t + 11'd1;
          end
        end
        P_DRAIN: if (!p_feed_v && !(pc.use_bf && bf_busy)) p_state <= P_WR;
        P_WR: if (p_wr_gnt) begin
          p_t <= '0;
          if (p_g == pc.n_out - 11'd1) begin
            p_state <= P_IDLE;
            p_done  <= 1'b1;
          end else begin
            p_g <= p_g + 11'd1;
            p_state <= P_RUN;
          end
        end
        default: p_state <= P_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------------
  // A engine: INT8 attention GEMV on the BoothFlex core
  // ------------------------------------------------------------------
  typedef enum logic [2:0] {A_IDLE, A_RD, A_FEED, A_DRAIN, A_WR} a_state_e;
  a_state_e   a_state;
  attn_cmd_t  ac;
  logic [10:0] a_t, a_g;
  logic [7:0]  kv_reg [ARR][ARR];
  logic        a_wr_req, a_wr_gnt;

  assign kv_ready  = (a_state == A_RD);
  assign qb_re2    = (a_state == A_RD) && kv_valid;
  assign qb_rbank2 = ac.src_bank;
  assign qb_rrow2  = QRW'(ac.src_row + a_t);
  assign a_wr_req  = (a_state == A_WR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_state <= A_IDLE;
      ac      <= '0;
      a_t     <= '0;
      a_g     <= '0;
      a_done  <= 1'b0;
      for (int r = 0; r < ARR; r++) for (int c = 0; c < ARR; c++) kv_reg[r][c] <= '0;
    end else begin
      a_done <= 1'b0;
      unique case (a_state)
        A_IDLE: if (a_go) begin
          ac <= a_cmd;
          a_t <= '0;
          a_g <= '0;
          a_state <= A_RD;
        end
        A_RD: if (kv_valid) begin
          kv_reg  <= kv_data;
          a_state <= A_FEED;
        end
        A_FEED: if (bf_in_ready) begin
          if (a_t == ac.n_in - 11'd1) a_state <= A_DRAIN;
          else begin
            a_t <= a_t + 11'd1;
            a_state <= A_RD;
          end
        end
        A_DRAIN: if (!bf_busy) a_state <= A_WR;
        A_WR: if (a_wr_gnt) begin
          a_t <= '0;
          if (a_g == ac.n_out - 11'd1) begin
            a_state <= A_IDLE;
            a_done  <= 1'b1;
          end else begin
            a_g <= a_g + 11'd1;
            a_state <= A_RD;
          end
        end
        default: a_state <= A_IDLE;
      endcase
    end
  end

  // BoothFlex input multiplexer: ternary assist for P, INT8 for A.
  logic p_owns_bf;
  assign p_owns_bf = (p_state != P_IDLE) && pc.use_bf;
  always_comb begin
    if (p_owns_bf) begin
      bf_mode_in  = BF_TERNARY;
      bf_in_valid = p_feed_v;
      for (int r = 0; r < ARR; r++)
        for (int c = 0; c < ARR; c++)
          bf_mult[r][c] = {6'd0, trits[N_TINT*ARR*ARR + r*ARR + c]};
      bf_mcand    = qb_rdata1;
      bf_acc_clr  = (p_state == P_WR && p_wr_gnt);
    end else begin
      bf_mode_in  = BF_INT8;
      bf_in_valid = (a_state == A_FEED);
      bf_mult     = kv_reg;
      bf_mcand    = qb_rdata2;
      bf_acc_clr  = (a_state == A_WR && a_wr_gnt);
    end
    // clear on command start for either owner
    if ((p_state == P_IDLE && p_go && p_cmd.use_bf) || (a_state == A_IDLE && a_go))
      bf_acc_clr = 1'b1;
  end

  // ------------------------------------------------------------------
  // N engine: two-stage nonlinear operation and quantization
  // ------------------------------------------------------------------
  typedef enum logic [2:0] {N_IDLE, N_S1, N_S1_DRAIN, N_FIN, N_S2, N_S2_DRAIN} n_state_e;
  n_state_e  n_state;
  nl_cmd_t   nc;
  logic [10:0] n_cnt;                 // tiles issued in the current stage
  logic [IRW-1:0] n_row;
  logic [1:0]  n_q;
  logic        n_v1, n_v2;             // pipeline valids: read issued, unit result
  logic [IRW-1:0] n_row1, n_row2;
  logic [1:0]  n_q1, n_q2;
  logic [10:0] n_idx1, n_idx2;
  logic signed [15:0] n_gam [ARR];
  logic        n_issue, n_vec_start, n_fin_start, n_fin_busy, n_fin_done;
  logic        n_s1_out_v, n_s2_out_v;
  logic signed [15:0] n_s1_y [ARR];
  logic signed [7:0]  n_s2_q [ARR];
  logic [1:0]  n_qlast;

  assign n_qlast = nc.src_q0 + 2'(nc.tpr - 3'd1);
  assign n_issue = ((n_state == N_S1) && (nc.mode != NL_RMSNORM || g_valid)) || (n_state == N_S2);
  assign g_ready = (n_state == N_S1) && (nc.mode == NL_RMSNORM);
  assign ib_rea  = n_issue;
  assign ib_rrowa = n_row;
  assign ib_rqa  = n_q;
  assign n_cmd_ready = (n_state == N_IDLE);
  assign n_vec_start = (n_state == N_IDLE) && n_cmd_valid;

  fp_unit u_fp (
    .clk, .rst_n, .mode(nc.mode), .in_scale(nc.in_scale), .vec_start(n_vec_start),
    .s1_valid(n_v1 && n_state inside {N_S1, N_S1_DRAIN}), .s1_x(ib_rdataa), .s1_gamma(n_gam),
    .s1_out_valid(n_s1_out_v), .s1_y(n_s1_y),
    .fin_start(n_fin_start), .fin_busy(n_fin_busy), .fin_done(n_fin_done),
    .stat_sum(nl_stat_sum), .stat_max(nl_stat_max),
    .s2_valid(n_v1 && n_state inside {N_S2, N_S2_DRAIN}), .s2_y(ib_rdataa),
    .s2_out_valid(n_s2_out_v), .s2_q(n_s2_q));

  assign n_fin_start = (n_state == N_FIN) && !n_fin_busy && !n_fin_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_state <= N_IDLE;
      nc      <= '0;
      n_cnt   <= '0;
      n_row   <= '0;
      n_q     <= '0;
      n_v1    <= 1'b0;
      n_v2    <= 1'b0;
      n_row1  <= '0; n_row2 <= '0;
      n_q1    <= '0; n_q2   <= '0;
      n_idx1  <= '0; n_idx2 <= '0;
      n_done  <= 1'b0;
      for (int i = 0; i < ARR; i++) n_gam[i] <= '0;
    end else begin
      n_done <= 1'b0;
      n_v1   <= n_issue;
      n_v2   <= n_v1;
      n_row1 <= n_row;  n_row2 <= n_row1;
      n_q1   <= n_q;    n_q2   <= n_q1;
      n_idx1 <= n_cnt;  n_idx2 <= n_idx1;
      if (n_issue && n_state == N_S1) n_gam <= g_data;
      if (n_issue) begin
        n_cnt <= n_cnt + 11'd1;
        if (n_q == n_qlast) begin
          n_q   <= nc.src_q0;
          n_row <= n_row + IRW'(1);
        end else begin
          n_q <= n_q + 2'd1;
        end
      end
      unique case (n_state)
        N_IDLE: if (n_cmd_valid) begin
          nc      <= n_cmd;
          n_cnt   <= '0;
          n_row   <= IRW'(n_cmd.src_row);
          n_q     <= n_cmd.src_q0;
          n_state <= N_S1;
        end
        N_S1: if (n_issue && n_cnt == nc.n_tiles - 11'd1) n_state <= N_S1_DRAIN;
        N_S1_DRAIN: if (!n_v1 && !n_v2) n_state <= N_FIN;
        N_FIN: if (n_fin_done) begin
          n_cnt   <= '0;
          n_row   <= IRW'(nc.src_row);
          n_q     <= nc.src_q0;
          n_state <= N_S2;
        end
        N_S2: if (n_issue && n_cnt == nc.n_tiles - 11'd1) n_state <= N_S2_DRAIN;
        N_S2_DRAIN: if (!n_v1 && !n_v2) begin
          n_state <= N_IDLE;
          n_done  <= 1'b1;
        end
        default: n_state <= N_IDLE;
      endcase
    end
  end

  // quantized-buffer write port: N engine, else host
  always_comb begin
    if (n_s2_out_v) begin
      qb_we    = 1'b1;
      qb_wbank = nc.dst_bank;
      qb_wrow  = QRW'(nc.dst_row + n_idx2);
      qb_wdata = n_s2_q;
    end else begin
      qb_we    = host_qb_we;
      qb_wbank = host_qb_bank;
      qb_wrow  = host_qb_row;
      qb_wdata = host_qb_data;
    end
  end

  // The unpacked weights and the activation row arrive in the same cycle.
  a_wu_align: assert property (@(posedge clk) disable iff (!rst_n) wu_out_valid == p_feed_v);
  a_bf_owner: assert property (@(posedge clk) disable iff (!rst_n) p_owns_bf |-> sched_bf_mode == BF_TERNARY);
  a_host_qb: assert property (@(posedge clk) disable iff (!rst_n) host_qb_we |-> n_state == N_IDLE);

  // ------------------------------------------------------------------
  // intermediate-buffer write arbiter: N > P > A
  // ------------------------------------------------------------------
  logic n_wr_req;
  assign n_wr_req = n_s1_out_v;
  assign p_wr_gnt = p_wr_req && !n_wr_req;
  assign a_wr_gnt = a_wr_req && !n_wr_req && !p_wr_req;

  always_comb begin
    ib_we    = n_wr_req || p_wr_gnt || a_wr_gnt;
    ib_wrow  = '0;
    ib_wmask = '0;
    for (int l = 0; l < IB_LANES; l++) ib_wdata[l] = '0;
    if (n_wr_req) begin
      ib_wrow = n_row2;
      for (int l = 0; l < IB_LANES; l++) begin
        ib_wdata[l] = n_s1_y[l % ARR];
        ib_wmask[l] = (2'(l / ARR) == n_q2);
      end
    end else if (p_wr_gnt) begin
      ib_wrow = IRW'(pc.dst_row + p_g);
      for (int k = 0; k < N_TINT; k++)
        for (int r = 0; r < ARR; r++) begin
          ib_wdata[k*ARR + r] = tint_psum[k][r];
          ib_wmask[k*ARR + r] = 1'b1;
        end
      for (int r = 0; r < ARR; r++) begin
        ib_wdata[N_TINT*ARR + r] = bf_acc[r];
        ib_wmask[N_TINT*ARR + r] = pc.use_bf;
      end
    end else if (a_wr_gnt) begin
      ib_wrow = IRW'(ac.dst_row + a_g);
      for (int l = 0; l < IB_LANES; l++) begin
        ib_wdata[l] = bf_acc[l % ARR];
        ib_wmask[l] = (2'(l / ARR) == ac.dst_q);
      end
    end
  end

  // ------------------------------------------------------------------
  // L engine: leading-one prediction and Top-K selection
  // ------------------------------------------------------------------
  typedef enum logic [2:0] {L_IDLE, L_Q, L_QDRAIN, L_K, L_KDRAIN, L_SEL, L_WAIT} l_state_e;
  l_state_e  l_state;
  lop_cmd_t  lc;
  logic [4:0]  l_dt;
  logic [IRW-1:0] l_row;
  logic [1:0]  l_q;
  logic        l_v1;
  logic [4:0]  l_dt1;
  logic [IW:0] l_grp, l_ngrp;
  logic        l_ld_pend;
  logic [IW-1:0] l_ld_base;
  logic [1:0]  l_qlast;
  logic        l_q_issue, l_k_take, l_last_dt;
  logic signed [7:0] l_qsat [ARR];
  logic [LO_W-1:0]   l_qlo  [ARR];
  logic [ARR-1:0]    l_dmask, l_ldmask;
  logic signed [23:0] l_score [ARR];
  logic        tk_clr, tk_start, tk_busy, tk_done;

  assign l_qlast   = lc.q_q0 + 2'(lc.q_tpr - 3'd1);
  assign l_q_issue = (l_state == L_Q);
  assign ib_reb    = l_q_issue;
  assign ib_rrowb  = l_row;
  assign ib_rqb    = l_q;
  assign klo_ready = (l_state == L_K);
  assign l_k_take  = (l_state == L_K) && klo_valid;
  assign l_last_dt = (l_dt == lc.n_dtiles - 5'd1);

  always_comb begin
    for (int i = 0; i < ARR; i++)
      l_qsat[i] = (ib_rdatab[i] > 16'sd127) ? 8'sd127 :
                  (ib_rdatab[i] < -16'sd128) ? -8'sd128 : 8'(ib_rdatab[i]);
    for (int i = 0; i < ARR; i++)
      l_dmask[i] = !l_last_dt || (4'(i) < lc.last_dims);
    for (int i = 0; i < ARR; i++)
      l_ldmask[i] = (32'(l_ld_base) + 32'(i)) < 32'(lc.n_tok);
  end

  leading_one_detector u_lod (.x(l_qsat), .lo(l_qlo));

  lop_core #(.DTILES(DTILES)) u_lop (
    .clk, .rst_n, .q_we(l_v1), .q_tile(DW'(l_dt1)), .q_lo(l_qlo),
    .k_valid(l_k_take), .k_tile(DW'(l_dt)), .first(l_dt == '0), .dim_mask(l_dmask),
    .k_lo(klo_data), .score(l_score));

  topk_selector #(.MAX_SEQ(MAX_SEQ)) u_topk (
    .clk, .rst_n, .clr(tk_clr), .ld_valid(l_ld_pend), .ld_base(l_ld_base), .ld_mask(l_ldmask),
    .ld_score(l_score), .start(tk_start), .busy(tk_busy),
    .out_valid(idx_valid), .out_ready(idx_ready), .out_idx(idx), .done(tk_done));

  assign l_cmd_ready = (l_state == L_IDLE);
  assign tk_clr   = (l_state == L_IDLE) && l_cmd_valid;
  assign tk_start = (l_state == L_SEL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l_state <= L_IDLE;
      lc      <= '0;
      l_dt    <= '0;
      l_row   <= '0;
      l_q     <= '0;
      l_v1    <= 1'b0;
      l_dt1   <= '0;
      l_grp   <= '0;
      l_ngrp  <= '0;
      l_ld_pend <= 1'b0;
      l_ld_base <= '0;
      l_done  <= 1'b0;
    end else begin
      l_done    <= 1'b0;
      l_v1      <= l_q_issue;
      l_dt1     <= l_dt;
      l_ld_pend <= 1'b0;
      unique case (l_state)
        L_IDLE: if (l_cmd_valid) begin
          lc     <= l_cmd;
          l_dt   <= '0;
          l_row  <= IRW'(l_cmd.q_row);
          l_q    <= l_cmd.q_q0;
          l_grp  <= '0;
          l_ngrp <= (IW+1)'((l_cmd.n_tok + 13'd7) >> 3);
          l_state <= L_Q;
        end
        L_Q: begin
          if (l_q == l_qlast) begin
            l_q   <= lc.q_q0;
            l_row <= l_row + IRW'(1);
          end else begin
            l_q <= l_q + 2'd1;
          end
          if (l_last_dt) begin
            l_dt    <= '0;
            l_state <= L_QDRAIN;
          end else begin
            l_dt <= l_dt + 5'd1;
          end
        end
        L_QDRAIN: l_state <= L_K;
        L_K: if (l_k_take) begin
          if (l_last_dt) begin
            l_dt      <= '0;
            l_ld_pend <= 1'b1;
            l_ld_base <= IW'(l_grp << 3);
            l_grp     <= l_grp + 1'b1;
            if (l_grp == l_ngrp - 1'b1) l_state <= L_KDRAIN;
          end else begin
            l_dt <= l_dt + 5'd1;
          end
        end
        L_KDRAIN: l_state <= L_SEL;
        L_SEL: l_state <= L_WAIT;
        L_WAIT: if (tk_done) begin
          l_state <= L_IDLE;
          l_done  <= 1'b1;
        end
        default: l_state <= L_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------------
  // issue control
  // ------------------------------------------------------------------
  head_scheduler u_sched (
    .clk, .rst_n,
    .p_cmd_valid(p_cmd_valid && p_state == P_IDLE), .p_produce(p_cmd.produce),
    .p_use_bf(p_cmd.use_bf), .p_wait_q(p_cmd.wait_q),
    .p_busy(p_state != P_IDLE), .p_done(p_done), .p_go(p_go),
    .a_cmd_valid(a_cmd_valid && a_state == A_IDLE), .a_head_first(a_cmd.head_first),
    .a_head_last(a_cmd.head_last), .a_busy(a_state != A_IDLE),
    .a_done(a_done), .a_go(a_go), .nl_done(n_done), .bf_mode(sched_bf_mode),
    .ev_head_credit_stall(ev_credit), .ev_attn_head_wait(ev_hwait),
    .ev_overlap(ev_overlap), .ev_bf_to_ternary(ev_to_t),
    .ev_bf_to_int8(ev_to_i), .ev_bf_busy_stall(ev_bfstall),
    .ev_quant_barrier(ev_barrier));

  assign p_cmd_ready = p_go;
  assign a_cmd_ready = a_go;
  always_comb begin
    events.head_credit_stall = ev_credit;
    events.attn_head_wait    = ev_hwait;
    events.overlap           = ev_overlap;
    events.bf_to_ternary     = ev_to_t;
    events.bf_to_int8        = ev_to_i;
    events.bf_busy_stall     = ev_bfstall;
    events.quant_barrier     = ev_barrier;
    events.wr_conflict       = (p_wr_req && !p_wr_gnt) || (a_wr_req && !a_wr_gnt);
  end
endmodule
