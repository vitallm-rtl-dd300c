// tb_vitallm_top: end-to-end test of the accelerator at its default sizes
// (1088-row quantized buffer, 1372-row intermediate buffer, 4096-token Top-K).
//
// The testbench plays the part of the host and of external memory: it loads
// INT8 vectors into the quantized buffer, issues commands to the four engines
// from four concurrent threads and serves the weight, K/V, gamma and key
// leading-one streams with random data (random bubbles included). Every result
// is compared with a reference computed here from the data that actually
// crossed each stream:
//   * ternary projections (TINT cores alone and with the BoothFlex core in
//     ternary mode) against integer dot products of base-3 decoded weights;
//   * INT8 attention GEMVs on the BoothFlex core against integer products;
//   * RMSNorm (exact stage-1 values and sum of squares), softmax (real exp,
//     1% tolerance) and plain quantization, INT8 codes within one step of
//     round(127 * y / max|y|);
//   * Top-K indices of the leading-one surrogate scores against a reference
//     top-32, for 300 tokens and for a full 4096-token context with a
//     100-dimension head.
// Rates checked: a projection group takes n_in + 3 cycles when uncontended
// (one weight tile per cycle); INT8 attention tiles enter the BoothFlex core
// no closer than 5 cycles apart, and do reach that rate.
// The schedule is built so that every mechanism of the design happens: head
// wait, head-slot (credit) stall, projection/attention overlap, BoothFlex
// ternary assist and switch back to INT8, BoothFlex busy stall, quantization
// barrier, refused (retried) buffer writes, all three nonlinear modes and the
// Top-K stream. Each is counted and a mechanism never seen is a failure.
module tb_vitallm_top;
  import vitallm_pkg::*;
  localparam int QRW = 11, IRW = 11, IW = 12;

  logic clk = 0, rst_n = 0;
  logic host_qb_we;
  logic [1:0] host_qb_bank;
  logic [QRW-1:0] host_qb_row;
  logic signed [7:0] host_qb_data [ARR];
  logic p_cmd_valid, p_cmd_ready, a_cmd_valid, a_cmd_ready;
  logic n_cmd_valid, n_cmd_ready, l_cmd_valid, l_cmd_ready;
  proj_cmd_t p_cmd;
  attn_cmd_t a_cmd;
  nl_cmd_t   n_cmd;
  lop_cmd_t  l_cmd;
  logic w_valid, w_ready, kv_valid, kv_ready, klo_valid, klo_ready, g_valid, g_ready;
  logic [7:0] w_bytes [N_LUT];
  logic [7:0] kv_data [ARR][ARR];
  logic [LO_W-1:0] klo_data [ARR][ARR];
  logic signed [15:0] g_data [ARR];
  logic idx_valid, idx_ready;
  logic [IW-1:0] idx;
  logic p_done, a_done, n_done, l_done;
  logic [47:0] nl_stat_sum;
  logic [15:0] nl_stat_max;
  events_t events;

  vitallm_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------
  // mechanism counters (sampled with the flip-flops)
  // ------------------------------------------------------------------
  int n_credit = 0, n_hwait = 0, n_overlap = 0, n_to_t = 0, n_to_i = 0, n_bfstall = 0;
  int n_barrier = 0, n_conflict = 0, n_int8_tiles = 0, n_tern_tiles = 0;
  int last_int8 = -1, min_int8_gap = 1000;
  int n_rms = 0, n_smax = 0, n_quant = 0, n_idx = 0, n_topk = 0;
  always @(posedge clk) if (rst_n) begin
    n_credit   += int'(events.head_credit_stall);
    n_hwait    += int'(events.attn_head_wait);
    n_overlap  += int'(events.overlap);
    n_to_t     += int'(events.bf_to_ternary);
    n_to_i     += int'(events.bf_to_int8);
    n_bfstall  += int'(events.bf_busy_stall);
    n_barrier  += int'(events.quant_barrier);
    n_conflict += int'(events.wr_conflict);
    if (dut.u_bf.first_iter) begin
      if (dut.u_bf.mode == BF_INT8) begin
        n_int8_tiles++;
        if (last_int8 >= 0 && cyc - last_int8 < min_int8_gap) min_int8_gap = cyc - last_int8;
        last_int8 = cyc;
      end else n_tern_tiles++;
    end
    if (n_cmd_valid && n_cmd_ready) begin
      if (n_cmd.mode == NL_RMSNORM) n_rms++;
      else if (n_cmd.mode == NL_SOFTMAX) n_smax++;
      else n_quant++;
    end
    if (idx_valid && idx_ready) n_idx++;
    if (l_done) n_topk++;
  end

  // ------------------------------------------------------------------
  // reference helpers
  // ------------------------------------------------------------------
  function automatic int trit(input logic [7:0] b, input int i);
    int v = int'(b);
    if (v > 242) return 0;
    for (int k = 0; k < i; k++) v = v / 3;
    return (v % 3) - 1;
  endfunction

  function automatic int qb_elem(input int bank, input int row, input int i);
    logic [63:0] w = dut.u_qbuf.mem[bank][row];
    return int'($signed(w[8*i +: 8]));
  endfunction

  function automatic int ib_elem(input int row, input int lane);
    return int'($signed(dut.u_ibuf.mem[row][lane]));
  endfunction

  function automatic real rabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic int lo_code(input int x);   // {sign, floor(log2|x|)}
    int a = (x < 0) ? -x : x;
    int e = 0;
    while (a > 1) begin a = a / 2; e++; end
    return ((x < 0) ? 8 : 0) + e;
  endfunction

  // ------------------------------------------------------------------
  // stream sources: a new beat is made after the previous one was taken
  // ------------------------------------------------------------------
  // beats are kept packed: element i of a beat at bits [8i +: 8] (weights),
  // [8(8r+c) +: 8] (K/V), [4(8r+c) +: 4] (key codes), [16i +: 16] (gamma)
  typedef logic [8*N_LUT-1:0]   wbeat_t;
  typedef logic [8*ARR*ARR-1:0] kvbeat_t;
  typedef logic [4*ARR*ARR-1:0] klobeat_t;
  typedef logic [16*ARR-1:0]    gbeat_t;
  wbeat_t   w_q   [$];
  kvbeat_t  kv_q  [$];
  klobeat_t klo_q [$];
  gbeat_t   g_q   [$];
  int idx_got [$];

  // At each falling edge: replace the beats taken at the last rising edge,
  // choose the valid/ready values, and record the beats the next rising edge
  // will take (all ready signals depend on engine state only).
  bit hold_w = 0;   // no weight bubbles while a rate is measured
  bit w_tk = 0, kv_tk = 0, klo_tk = 0, g_tk = 0;
  always @(negedge clk) begin
    if (rst_n) begin
      if (w_tk)   foreach (w_bytes[i]) w_bytes[i] = 8'($urandom);
      if (kv_tk)  foreach (kv_data[r, c]) kv_data[r][c] = 8'($urandom);
      if (klo_tk) foreach (klo_data[r, c]) klo_data[r][c] = 4'($urandom);
      if (g_tk)   foreach (g_data[i]) g_data[i] = 16'($urandom_range(0, 32767) - 16384);
      w_valid   = ($urandom_range(0, 15) != 0) || hold_w;
      kv_valid  = ($urandom_range(0, 7) != 0);
      klo_valid = ($urandom_range(0, 7) != 0);
      g_valid   = ($urandom_range(0, 3) != 0);
      idx_ready = ($urandom_range(0, 3) != 0);
      w_tk   = w_valid && w_ready;
      kv_tk  = kv_valid && kv_ready;
      klo_tk = klo_valid && klo_ready;
      g_tk   = g_valid && g_ready;
      if (w_tk) begin
        wbeat_t b;
        foreach (w_bytes[i]) b[8*i +: 8] = w_bytes[i];
        w_q.push_back(b);
      end
      if (kv_tk) begin
        kvbeat_t b;
        foreach (kv_data[r, c]) b[8*(8*r+c) +: 8] = kv_data[r][c];
        kv_q.push_back(b);
      end
      if (klo_tk) begin
        klobeat_t b;
        foreach (klo_data[r, c]) b[4*(8*r+c) +: 4] = klo_data[r][c];
        klo_q.push_back(b);
      end
      if (g_tk) begin
        gbeat_t b;
        foreach (g_data[i]) b[16*i +: 16] = g_data[i];
        g_q.push_back(b);
      end
      if (idx_valid && idx_ready) idx_got.push_back(int'(idx));
    end
  end

  // ------------------------------------------------------------------
  // command issue
  // ------------------------------------------------------------------
  task automatic send_p(input proj_cmd_t c, output int t_go);
    @(negedge clk);
    p_cmd_valid = 1; p_cmd = c;
    #1;
    while (!p_cmd_ready) begin @(negedge clk); #1; end
    t_go = cyc;
    $display("[%0d] projection to rows %0d.. started", cyc, c.dst_row);
    @(negedge clk);
    p_cmd_valid = 0;
  endtask
  task automatic send_a(input attn_cmd_t c);
    @(negedge clk);
    a_cmd_valid = 1; a_cmd = c;
    #1;
    while (!a_cmd_ready) begin @(negedge clk); #1; end
    $display("[%0d] attention to rows %0d.. started", cyc, c.dst_row);
    @(negedge clk);
    a_cmd_valid = 0;
  endtask

  // projection result check: the command's weight beats are the next
  // n_in * n_out beats taken from the stream
  task automatic check_p(input proj_cmd_t c);
    int expv [32];
    wbeat_t b;
    int tr [N_LUT*5];
    for (int g = 0; g < int'(c.n_out); g++) begin
      foreach (expv[l]) expv[l] = 0;
      for (int t = 0; t < int'(c.n_in); t++) begin
        b = w_q.pop_front();
        for (int j = 0; j < N_LUT; j++)
          for (int i = 0; i < 5; i++) tr[j*5+i] = trit(b[8*j +: 8], i);
        for (int l = 0; l < 32; l++)
          for (int col = 0; col < 8; col++)
            expv[l] += tr[l*8 + col] * qb_elem(c.src_bank, c.src_row + t, col);
      end
      for (int l = 0; l < (c.use_bf ? 32 : 24); l++)
        check(ib_elem(c.dst_row + g, l) == int'($signed(16'(expv[l]))),
              $sformatf("proj row %0d lane %0d: %0d vs %0d", c.dst_row + g, l,
                        ib_elem(c.dst_row + g, l), $signed(16'(expv[l]))));
    end
  endtask

  task automatic check_a(input attn_cmd_t c);
    int expv [8];
    kvbeat_t b;
    for (int g = 0; g < int'(c.n_out); g++) begin
      foreach (expv[r]) expv[r] = 0;
      for (int t = 0; t < int'(c.n_in); t++) begin
        b = kv_q.pop_front();
        for (int r = 0; r < 8; r++)
          for (int col = 0; col < 8; col++)
            expv[r] += int'($signed(b[8*(8*r+col) +: 8])) * qb_elem(c.src_bank, c.src_row + t, col);
      end
      for (int r = 0; r < 8; r++)
        check(ib_elem(c.dst_row + g, 8*c.dst_q + r) == int'($signed(16'(expv[r]))),
              $sformatf("attn row %0d lane %0d", c.dst_row + g, 8*c.dst_q + r));
    end
  endtask

  // ------------------------------------------------------------------
  // scenario
  // ------------------------------------------------------------------
  bit p1_checked = 0, p4_done = 0, a_all_done = 0, n2_done = 0;   // progress flags
  int p_group_cycles = -1;

  task automatic thread_p();
    proj_cmd_t c;
    int t0;
    // P1: head 0 projection (produces a head), 4 tiles in, 2 groups out
    c = '0; c.src_bank = 0; c.src_row = 0; c.n_in = 4; c.n_out = 2; c.dst_row = 0; c.produce = 1;
    hold_w = 1;
    send_p(c, t0);
    @(posedge p_done); @(negedge clk);
    hold_w = 0;
    p_group_cycles = cyc - t0 - 1;   // done is seen one edge after it is set
    check(p_group_cycles == 2 * (4 + 3), $sformatf("P1 took %0d cycles", p_group_cycles));
    check_p(c);
    p1_checked = 1;
    // P2: head 1, on the vector quantized by N1 from P1's outputs: waits at
    // the quantization barrier. P3: head 2, must wait for a free head slot.
    c = '0; c.src_bank = 2; c.src_row = 0; c.n_in = 6; c.n_out = 1; c.dst_row = 10;
    c.produce = 1; c.wait_q = 1;
    send_p(c, t0);
    @(posedge p_done); @(negedge clk); check_p(c);
    c.dst_row = 20; c.wait_q = 0;
    send_p(c, t0);
    @(posedge p_done); @(negedge clk); check_p(c);
    // P4: output projection with the BoothFlex core assisting (32 outputs
    // per group); waits while attention uses the array
    c = '0; c.src_bank = 2; c.src_row = 0; c.n_in = 6; c.n_out = 2; c.dst_row = 30;
    c.use_bf = 1;
    send_p(c, t0);
    @(posedge p_done); @(negedge clk); check_p(c);
    p4_done = 1;
  endtask

  task automatic thread_a();
    attn_cmd_t c;
    // A1 arrives before any head exists
    c = '0; c.src_bank = 1; c.src_row = 0; c.n_in = 2; c.n_out = 2; c.dst_row = 100; c.dst_q = 0;
    c.head_first = 1;
    send_a(c);
    @(posedge a_done); @(negedge clk);
    check_a(c);
    c = '0; c.src_bank = 1; c.src_row = 0; c.n_in = 3; c.n_out = 1; c.dst_row = 102; c.dst_q = 1;
    c.head_last = 1;
    send_a(c);
    @(posedge a_done); @(negedge clk); check_a(c);
    c = '0; c.src_bank = 1; c.src_row = 0; c.n_in = 2; c.n_out = 2; c.dst_row = 104; c.dst_q = 2;
    c.head_first = 1; c.head_last = 1;
    send_a(c);
    @(posedge a_done); @(negedge clk); check_a(c);
    // A4: long head 2 attention, running when P4 wants the BoothFlex core
    c = '0; c.src_bank = 1; c.src_row = 0; c.n_in = 4; c.n_out = 6; c.dst_row = 106; c.dst_q = 3;
    c.head_first = 1; c.head_last = 1;
    send_a(c);
    @(posedge a_done); @(negedge clk); check_a(c);
    // A5: issued while P4 holds the array in ternary mode
    c = '0; c.src_bank = 1; c.src_row = 0; c.n_in = 2; c.n_out = 1; c.dst_row = 112; c.dst_q = 0;
    send_a(c);
    @(posedge a_done); @(negedge clk); check_a(c);
    a_all_done = 1;
  endtask

  // nonlinear command with reference check
  task automatic run_n(input nl_cmd_t c);
    int xs [$], ys [$], rows [$], lanes [$];
    gbeat_t gs [$];
    longint sum_ref = 0;
    int max_ref = 0;
    int row = int'(c.src_row), q = int'(c.src_q0);
    for (int t = 0; t < int'(c.n_tiles); t++) begin
      for (int i = 0; i < 8; i++) begin
        xs.push_back(ib_elem(row, 8*q + i));
        rows.push_back(row); lanes.push_back(8*q + i);
      end
      if (q == int'(c.src_q0) + int'(c.tpr) - 1) begin q = c.src_q0; row++; end
      else q++;
    end
    @(negedge clk);
    $display("[%0d] nonlinear mode %s on rows %0d..", cyc, c.mode.name(), c.src_row);
    n_cmd_valid = 1; n_cmd = c;
    @(negedge clk);
    n_cmd_valid = 0;
    @(posedge n_done); @(negedge clk);
    if (c.mode == NL_RMSNORM)
      for (int t = 0; t < int'(c.n_tiles); t++) gs.push_back(g_q.pop_front());
    for (int k = 0; k < xs.size(); k++) begin
      int y, got;
      got = ib_elem(rows[k], lanes[k]);
      case (c.mode)
        NL_RMSNORM: begin
          longint p;
          p = (longint'(xs[k]) * longint'($signed(gs[k/8][16*(k%8) +: 16])) + 8192) >>> 14;
          y = (p > 32767) ? 32767 : (p < -32767) ? -32767 : int'(p);
          sum_ref += longint'(xs[k]) * longint'(xs[k]);
          check(got == y, $sformatf("rms y %0d vs %0d", got, y));
        end
        NL_SOFTMAX: begin
          longint p;
          real l, e;
          p = (longint'(xs[k]) * longint'(c.in_scale)) >>> 8;
          l = real'(p) / 256.0;
          if (l > 16.0) l = 16.0;
          e = $exp(l - 16.0) * 16384.0;
          check(rabs(real'(got) - e) <= e * 0.01 + 2.0, $sformatf("exp %0d vs %f", got, e));
          y = got;
          sum_ref += longint'(got);
        end
        default: begin
          y = (xs[k] == -32768) ? -32767 : xs[k];
          check(got == y, "quant pass-through");
        end
      endcase
      ys.push_back(y);
      if ((y < 0 ? -y : y) > max_ref) max_ref = (y < 0 ? -y : y);
    end
    check(int'(nl_stat_max) == max_ref, $sformatf("stat_max %0d vs %0d", nl_stat_max, max_ref));
    if (c.mode != NL_QUANT) check(nl_stat_sum == 48'(sum_ref), "stat_sum");
    for (int k = 0; k < ys.size(); k++) begin
      real qr;
      int got;
      qr = (max_ref == 0) ? 0.0 : 127.0 * real'(ys[k]) / real'(max_ref);
      got = qb_elem(c.dst_bank, int'(c.dst_row) + k / 8, k % 8);
      check(rabs(real'(got) - qr) <= 1.0, $sformatf("q %0d vs %f", got, qr));
    end
  endtask

  task automatic thread_n();
    nl_cmd_t c;
    // N1: quantize the 48 outputs of P1 (3 tiles per row) into bank 2
    wait (p1_checked);
    c = '0; c.mode = NL_QUANT; c.src_row = 0; c.src_q0 = 0; c.tpr = 3; c.n_tiles = 6;
    c.dst_bank = 2; c.dst_row = 0;
    run_n(c);
    // N0: a long softmax over rows 200..; its stage-1 write-backs have
    // priority and make projection/attention writes wait
    c = '0; c.mode = NL_SOFTMAX; c.src_row = 200; c.src_q0 = 0; c.tpr = 4; c.n_tiles = 96;
    c.dst_bank = 0; c.dst_row = 200; c.in_scale = 16'd300;
    run_n(c);
    // N2: RMSNorm of P4's 64 outputs
    wait (p4_done);
    c = '0; c.mode = NL_RMSNORM; c.src_row = 30; c.src_q0 = 0; c.tpr = 4; c.n_tiles = 8;
    c.dst_bank = 2; c.dst_row = 20;
    run_n(c);
    n2_done = 1;
    // N3: softmax over attention scores in quarter 0 of rows 100, 101
    wait (a_all_done);
    c = '0; c.mode = NL_SOFTMAX; c.src_row = 100; c.src_q0 = 0; c.tpr = 1; c.n_tiles = 2;
    c.dst_bank = 0; c.dst_row = 60; c.in_scale = 16'd200;
    run_n(c);
  endtask

  // leading-one prediction with Top-K check
  task automatic run_l(input lop_cmd_t c);
    int qlo [128];
    longint score [$];
    bit picked [4096];
    int row = int'(c.q_row), q = int'(c.q_q0);
    int nexp, ntok = int'(c.n_tok);
    int ndim = (int'(c.n_dtiles) - 1) * 8 + int'(c.last_dims);
    for (int t = 0; t < int'(c.n_dtiles); t++) begin
      for (int i = 0; i < 8; i++) begin
        int v;
        v = ib_elem(row, 8*q + i);
        v = (v > 127) ? 127 : (v < -128) ? -128 : v;
        qlo[t*8 + i] = lo_code(v);
      end
      if (q == int'(c.q_q0) + int'(c.q_tpr) - 1) begin q = c.q_q0; row++; end
      else q++;
    end
    idx_got.delete();
    @(negedge clk);
    $display("[%0d] prediction over %0d tokens", cyc, c.n_tok);
    l_cmd_valid = 1; l_cmd = c;
    @(negedge clk);
    l_cmd_valid = 0;
    @(posedge l_done); @(negedge clk);
    // scores from the key codes that crossed the stream
    for (int g = 0; g * 8 < ntok; g++) begin
      longint s [8];
      foreach (s[r]) s[r] = 0;
      for (int t = 0; t < int'(c.n_dtiles); t++) begin
        klobeat_t b;
        b = klo_q.pop_front();
        for (int r = 0; r < 8; r++)
          for (int col = 0; col < 8; col++)
            if (t * 8 + col < ndim) begin
              int e;
              longint m;
              e = (qlo[t*8+col] % 8) + int'(b[4*(8*r+col) +: 3]);
              m = longint'(1) << e;
              s[r] += ((qlo[t*8+col] >= 8) != b[4*(8*r+col) + 3]) ? -m : m;
            end
      end
      for (int r = 0; r < 8; r++) score.push_back(s[r]);
    end
    nexp = (ntok < TOPK) ? ntok : TOPK;
    foreach (picked[i]) picked[i] = 0;
    for (int k = 0; k < nexp; k++) begin
      int best;
      best = -1;
      for (int i = 0; i < ntok; i++)
        if (!picked[i] && (best < 0 || score[i] > score[best])) best = i;
      picked[best] = 1;
    end
    check(idx_got.size() == nexp, $sformatf("top-k returned %0d of %0d", idx_got.size(), nexp));
    foreach (idx_got[k]) begin
      check(picked[idx_got[k]], $sformatf("index %0d not in the reference top-k", idx_got[k]));
      picked[idx_got[k]] = 0;   // a repeated index fails
    end
  endtask

  task automatic thread_l();
    lop_cmd_t c;
    wait (n2_done);
    // 64-dimension query in rows 30, 31 against 300 keys
    c = '0; c.q_row = 30; c.q_q0 = 0; c.q_tpr = 4; c.n_dtiles = 8; c.last_dims = 8; c.n_tok = 300;
    run_l(c);
    // 100-dimension query (13 tiles, 4 dims in the last) against 4096 keys
    c = '0; c.q_row = 30; c.q_q0 = 0; c.q_tpr = 4; c.n_dtiles = 13; c.last_dims = 4; c.n_tok = 4096;
    run_l(c);
  endtask

  initial begin
    host_qb_we = 0; host_qb_bank = 0; host_qb_row = 0;
    foreach (host_qb_data[i]) host_qb_data[i] = 0;
    p_cmd_valid = 0; a_cmd_valid = 0; n_cmd_valid = 0; l_cmd_valid = 0;
    p_cmd = '0; a_cmd = '0; n_cmd = '0; l_cmd = '0;
    w_valid = 0; kv_valid = 0; klo_valid = 0; g_valid = 0; idx_ready = 0;
    foreach (w_bytes[i]) w_bytes[i] = 8'($urandom);
    foreach (kv_data[r, c]) kv_data[r][c] = 8'($urandom);
    foreach (klo_data[r, c]) klo_data[r][c] = 4'($urandom);
    foreach (g_data[i]) g_data[i] = 16'($urandom_range(0, 32767) - 16384);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // host loads: bank 0 rows 0..3 (projection input), bank 1 rows 0..3
    // (attention vector); the stored rows are checked through the buffer
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < 4; r++) begin
        @(negedge clk);
        host_qb_we = 1; host_qb_bank = 2'(b); host_qb_row = QRW'(r);
        foreach (host_qb_data[i]) host_qb_data[i] = 8'($urandom);
        @(negedge clk);
        host_qb_we = 0;
        for (int i = 0; i < 8; i++) check(qb_elem(b, r, i) == int'(host_qb_data[i]), "host load");
      end
    fork
      thread_p();
      thread_a();
      thread_n();
      thread_l();
    join
    repeat (10) @(negedge clk);
    check(min_int8_gap == 5, $sformatf("INT8 attention: %0d cycles per K/V tile", min_int8_gap));
    $display("mechanisms: head_wait=%0d credit_stall=%0d overlap=%0d bf_to_ternary=%0d bf_to_int8=%0d",
             n_hwait, n_credit, n_overlap, n_to_t, n_to_i);
    $display("            bf_busy_stall=%0d quant_barrier=%0d write_retry=%0d int8_tiles=%0d ternary_tiles=%0d",
             n_bfstall, n_barrier, n_conflict, n_int8_tiles, n_tern_tiles);
    $display("            rmsnorm=%0d softmax=%0d quant=%0d topk_runs=%0d indices=%0d",
             n_rms, n_smax, n_quant, n_topk, n_idx);
    check(n_hwait > 0, "attention never waited for a head");
    check(n_credit > 0, "no head-slot stall");
    check(n_overlap > 0, "projection and attention never overlapped");
    check(n_to_t > 0, "BoothFlex never switched to ternary");
    check(n_to_i > 0, "BoothFlex never switched back to INT8");
    check(n_bfstall > 0, "no BoothFlex busy stall");
    check(n_barrier > 0, "no quantization barrier stall");
    check(n_conflict > 0, "no refused buffer write");
    check(n_int8_tiles > 0 && n_tern_tiles > 0, "BoothFlex modes not both used");
    check(n_rms > 0 && n_smax > 0 && n_quant > 0, "a nonlinear mode never ran");
    check(n_topk == 2 && n_idx > 0, "Top-K never streamed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
