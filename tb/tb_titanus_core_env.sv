// tb_titanus_core_env -- end-to-end test bench body for titanus_core.
//
// Plays the world around one core: writes the six weight matrices, the
// pruning thresholds and the quantization bit-widths, opens a sequence, sends
// NPRE prefill tokens, closes the prefill, sends NDEC decode tokens of growing
// magnitude, and after each decode token reads the whole compressed KV cache
// back through kvi_* (a behavioural off-chip memory filled from kvo_*). Last,
// it sends NFFN context vectors through the Out/FC1/FC2 chain.
// The reference model is written independently of the RTL: CIM projections
// with round-half-up shift and int8 saturation, pruning by magnitude, the
// cascade quantization with per-channel level 0 from the prefill and HQE
// levels in decode, dequantization with real arithmetic. It checks
//   * every diagonal score (q_t . k_t per head, fresh K) and its latency,
//   * the index map of every compressed group leaving the core,
//   * every reconstructed Value (vrec) and every score against a reconstructed
//     Key, including old tokens read after later HQE levels were created,
//   * every FFN output and its latency,
// and counts each mechanism: token-path pipelining (a prefill token accepted
// while the pruning unit still streams the previous one), pruning, QUANT state, level creation,
// saturation, dequantizer skip, engine zero skip, diagonal scores,
// reconstructed-K scores, reconstructed Values, FFN passes. A mechanism with a
// zero count is a failure (saturation only when REQ_SAT is set).
// FULL selects an instance with no parameter override (paper-size core).
module tb_titanus_core_env
  import titanus_pkg::*;
#(
  parameter int D = 64, parameter int DFF = 128, parameter int HEADS = 2,
  parameter int MAXP = 8, parameter int LEVELS = 4,
  parameter int NPRE = 6, parameter int NDEC = 8, parameter int NFFN = 2,
  parameter bit FULL = 0, parameter bit REQ_SAT = 1,
  parameter int RB_EVERY = 2, parameter int WATCHDOG = 400000
);
  `include "tb_ref.svh"
  localparam int LANES = PAR, LAYERS = N_LAYERS, HD = D / HEADS, G = (D + LANES - 1) / LANES;
  localparam int GW = $clog2(G + 1), LW = $clog2(LAYERS), CW = $clog2(LANES + 1), RW = $clog2(DFF + 1);
  localparam int NT = NPRE + NDEC;
  localparam int SH_IN = $clog2(D) / 2 + 1, SH_FF = $clog2(DFF) / 2 + 1;
  localparam int LAY = 3, TH_K = 10, TH_V = 6, BITS_K = 3, BITS_V = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [LW-1:0] layer;
  logic pcfg_we, pcfg_is_v, qcfg_we, qcfg_is_v;
  logic [LW-1:0] pcfg_layer, qcfg_layer;
  logic [7:0] pcfg_th;
  logic [3:0] qcfg_bits;
  logic [5:0][4:0] cim_shift;
  logic w_we;
  logic [2:0] w_sel;
  logic [RW-1:0] w_row;
  i8_t [DFF-1:0] w_data;
  logic start_seq, prefill_end, idle, tok_valid, tok_ready;
  qu_state_e qu_state;
  i8_t [D-1:0] tok_x;
  logic kvo_valid;
  logic [TOK_W-1:0] kvo_tok;
  logic [GW-1:0] kvo_g;
  logic [LANES-1:0] kvo_idx_k, kvo_lbl_k, kvo_idx_v, kvo_lbl_v;
  logic [LANES-1:0][7:0] kvo_q_k, kvo_q_v;
  logic [CW-1:0] kvo_cnt_k, kvo_cnt_v;
  logic kvi_valid, kvi_ready, kvi_is_v;
  logic [TOK_W-1:0] kvi_tok;
  logic [GW-1:0] kvi_g;
  logic [LANES-1:0] kvi_idx, kvi_lbl;
  logic [LANES-1:0][7:0] kvi_q;
  logic sc_valid, sc_diag, vrec_valid;
  logic [TOK_W-1:0] sc_tok, vrec_tok;
  logic signed [HEADS-1:0][31:0] sc;
  i8_t [D-1:0] vrec;
  logic ctx_valid, ctx_ready, y_valid;
  i8_t [D-1:0] ctx, y;
  logic ev_prune, ev_level, ev_sat, ev_dq_skip, ev_ce_skip;

  // pu_busy: the pruning unit is streaming a token (probe for the pipelining count)
  logic pu_busy;
  if (FULL) begin : g_full
    titanus_core dut (.*);
    assign pu_busy = dut.u_pu.busy;
  end else begin : g_small
    titanus_core #(.D(D), .DFF(DFF), .HEADS(HEADS), .MAXP(MAXP), .LEVELS(LEVELS)) dut (.*);
    assign pu_busy = dut.u_pu.busy;
  end

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL: %s @%0t", what, $time);
    end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  int wq [D][D], wk [D][D], wv [D][D], wo [D][D], w1 [DFF][D], w2 [D][DFF];
  int xq [NT][D], xk [NT][D], xv [NT][D];       // projections
  int pk [NT][2][D];                            // pruned K (0) and V (1)
  int rec [NT][2][D];                           // expected reconstruction
  int lev [2][D], ls [2][D], lz [2][D], llo [2][D], lhi [2][D];
  int bits [2] = '{BITS_K, BITS_V};
  int last_tok = -1;

  function automatic int cim_ref(input int acc, input int sh);
    longint v;
    v = (sh == 0) ? acc : ((longint'(acc) + (longint'(1) << (sh - 1))) >>> sh);
    return ref_sat8(v);
  endfunction

  task automatic project(input int t, input int x [D]);
    for (int r = 0; r < D; r++) begin
      int aq, ak, av;
      aq = 0; ak = 0; av = 0;
      for (int i = 0; i < D; i++) begin
        aq += wq[r][i] * x[i]; ak += wk[r][i] * x[i]; av += wv[r][i] * x[i];
      end
      xq[t][r] = cim_ref(aq, SH_IN); xk[t][r] = cim_ref(ak, SH_IN); xv[t][r] = cim_ref(av, SH_IN);
      pk[t][0][r] = (xk[t][r] >= TH_K || xk[t][r] <= -TH_K) ? xk[t][r] : 0;
      pk[t][1][r] = (xv[t][r] >= TH_V || xv[t][r] <= -TH_V) ? xv[t][r] : 0;
    end
  endtask

  function automatic int recon(input int x, input int kv, input int c);
    if (x == 0) return 0;
    return ref_deq(ref_quant(x, ls[kv][c], lz[kv][c], bits[kv]), lz[kv][c], ls[kv][c]);
  endfunction

  task automatic level0();
    for (int kv = 0; kv < 2; kv++) for (int c = 0; c < D; c++) begin
      int mx, mn, lo, hi;
      mx = -128; mn = 127;
      for (int t = 0; t < NPRE; t++) if (pk[t][kv][c] != 0) begin
        if (pk[t][kv][c] > mx) mx = pk[t][kv][c];
        if (pk[t][kv][c] < mn) mn = pk[t][kv][c];
      end
      lo = (mx < mn) ? 0 : mn; hi = (mx < mn) ? 0 : mx;
      lev[kv][c] = 0;
      ls[kv][c] = ref_scale(lo, hi, bits[kv]);
      lz[kv][c] = ref_zp(lo, ls[kv][c], bits[kv]);
      llo[kv][c] = lo - ls[kv][c] / 512; lhi[kv][c] = hi + ls[kv][c] / 512;
      for (int t = 0; t < NPRE; t++) rec[t][kv][c] = recon(pk[t][kv][c], kv, c);
    end
  endtask

  int n_ref_ext = 0, n_ref_sat = 0;
  task automatic decode_ref(input int t);
    for (int kv = 0; kv < 2; kv++) for (int c = 0; c < D; c++) begin
      int x;
      x = pk[t][kv][c];
      if (x != 0 && (x < llo[kv][c] || x > lhi[kv][c])) begin
        if (lev[kv][c] < LEVELS - 1) begin
          int elo, ehi;
          elo = (x < llo[kv][c]) ? x : llo[kv][c];
          ehi = (x > lhi[kv][c]) ? x : lhi[kv][c];
          lev[kv][c]++;
          ls[kv][c] = ref_scale(elo, ehi, bits[kv]);
          lz[kv][c] = ref_zp(elo, ls[kv][c], bits[kv]);
          llo[kv][c] = elo - ls[kv][c] / 512; lhi[kv][c] = ehi + ls[kv][c] / 512;
          n_ref_ext++;
        end else n_ref_sat++;
      end
      rec[t][kv][c] = recon(x, kv, c);
    end
  endtask

  // ---------------- off-chip memory and monitors ----------------
  logic [LANES-1:0]      m_idx [NT][2][G], m_lbl [NT][2][G];
  logic [LANES-1:0][7:0] m_q [NT][2][G];
  int n_kvo = 0;
  always @(posedge clk) if (rst_n && kvo_valid) begin
    int t, g;
    t = int'(kvo_tok); g = int'(kvo_g);
    n_kvo++;
    if (t < NT) begin
      m_idx[t][0][g] = kvo_idx_k; m_lbl[t][0][g] = kvo_lbl_k; m_q[t][0][g] = kvo_q_k;
      m_idx[t][1][g] = kvo_idx_v; m_lbl[t][1][g] = kvo_lbl_v; m_q[t][1][g] = kvo_q_v;
      for (int i = 0; i < LANES; i++) if (g * LANES + i < D) begin
        check(kvo_idx_k[i] == (pk[t][0][g*LANES+i] != 0) && kvo_idx_v[i] == (pk[t][1][g*LANES+i] != 0),
              $sformatf("index map t%0d g%0d lane %0d", t, g, i));
      end
    end else check(0, "kvo token out of range");
  end

  int n_diag = 0, n_asm = 0, n_vrec = 0, n_ffn = 0, n_quant = 0;
  int n_prune = 0, n_level = 0, n_sat = 0, n_dqskip = 0, n_ceskip = 0;
  int diag_cyc, diag_lat = -1, acc_cyc, n_overlap = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_prune) n_prune++;
    if (ev_level) n_level++;
    if (ev_sat) n_sat++;
    if (ev_dq_skip) n_dqskip++;
    if (ev_ce_skip) n_ceskip++;
    if (qu_state == QS_QUANT) n_quant++;
    if (tok_valid && tok_ready) begin
      acc_cyc = cyc;
      if (pu_busy) n_overlap++;
    end
    if (sc_valid) begin
      int t;
      t = int'(sc_tok);
      for (int h = 0; h < HEADS; h++) begin
        longint e;
        e = 0;
        for (int i = 0; i < HD; i++)
          e += xq[last_tok][h*HD+i] * (sc_diag ? xk[t][h*HD+i] : rec[t][0][h*HD+i]);
        check(longint'(int'(sc[h])) == e, $sformatf("%s score t%0d head %0d got %0d exp %0d",
              sc_diag ? "diagonal" : "reconstructed", t, h, int'(sc[h]), e));
      end
      if (sc_diag) begin
        check(t == last_tok, "diagonal token");
        check(cyc - acc_cyc == D + 6, $sformatf("diagonal latency %0d exp %0d", cyc - acc_cyc, D + 6));
        n_diag++;
      end else n_asm++;
    end
    if (vrec_valid) begin
      int t;
      t = int'(vrec_tok);
      for (int c = 0; c < D; c++)
        check(int'(vrec[c]) == rec[t][1][c], $sformatf("V t%0d ch %0d got %0d exp %0d", t, c, vrec[c], rec[t][1][c]));
      n_vrec++;
    end
  end

  // ---------------- stimulus ----------------
  task automatic load_weights();
    for (int m = 0; m < 6; m++) begin
      int rows;
      rows = (m == 4) ? DFF : D;
      for (int r = 0; r < rows; r++) begin
        @(negedge clk);
        w_we = 1; w_sel = 3'(m); w_row = RW'(r); w_data = '0;
        for (int i = 0; i < ((m == 5) ? DFF : D); i++) begin
          int w;
          w = $urandom_range(0, 8) - 4;
          w_data[i] = i8_t'(w);
          case (m)
            0: wq[r][i] = w;
            1: wk[r][i] = w;
            2: wv[r][i] = w;
            3: wo[r][i] = w;
            4: w1[r][i] = w;
            default: w2[r][i] = w;
          endcase
        end
      end
    end
    @(negedge clk); w_we = 0;
  endtask

  task automatic send_token(input int t, input int amp, input bit wait_idle);
    int x [D];
    for (int i = 0; i < D; i++) begin
      x[i] = $urandom_range(0, 2 * amp) - amp;
      tok_x[i] = i8_t'(x[i]);
    end
    project(t, x);
    tok_valid = 1;
    @(posedge clk);
    while (!tok_ready) @(posedge clk);
    last_tok = t;
    @(negedge clk); tok_valid = 0;
    // wait for the diagonal score and the end of the token path
    while (n_diag <= t) @(negedge clk);
    if (wait_idle) while (!idle) @(negedge clk);
  endtask

  // read one compressed token (K then V) back through the dequantizer
  task automatic read_back(input int t);
    for (int kv = 0; kv < 2; kv++) begin
      for (int g = 0; g < G; g++) begin
        kvi_valid = 1; kvi_is_v = kv[0]; kvi_tok = TOK_W'(t); kvi_g = GW'(g);
        kvi_idx = m_idx[t][kv][g]; kvi_lbl = m_lbl[t][kv][g]; kvi_q = m_q[t][kv][g];
        @(posedge clk);
        while (!kvi_ready) @(posedge clk);
        @(negedge clk);
      end
      kvi_valid = 0;
    end
  endtask

  int ffn_acc;
  task automatic ffn_pass();
    int c [D], o [D], f1 [DFF], yy [D];
    for (int i = 0; i < D; i++) begin c[i] = $urandom_range(0, 80) - 40; ctx[i] = i8_t'(c[i]); end
    for (int r = 0; r < D; r++) begin
      int a; a = 0;
      for (int i = 0; i < D; i++) a += wo[r][i] * c[i];
      o[r] = cim_ref(a, SH_IN);
    end
    for (int r = 0; r < DFF; r++) begin
      int a; a = 0;
      for (int i = 0; i < D; i++) a += w1[r][i] * o[i];
      f1[r] = cim_ref(a, SH_IN);
    end
    for (int r = 0; r < D; r++) begin
      int a; a = 0;
      for (int i = 0; i < DFF; i++) a += w2[r][i] * f1[i];
      yy[r] = cim_ref(a, SH_FF);
    end
    ctx_valid = 1;
    @(posedge clk);
    while (!ctx_ready) @(posedge clk);
    ffn_acc = cyc;
    @(negedge clk); ctx_valid = 0;
    while (!y_valid) @(negedge clk);
    check(cyc - ffn_acc == 3 * 2 + 2 * D + DFF,
          $sformatf("FFN latency %0d exp %0d", cyc - ffn_acc, 3 * 2 + 2 * D + DFF));
    for (int r = 0; r < D; r++) check(int'(y[r]) == yy[r], $sformatf("y[%0d] got %0d exp %0d", r, y[r], yy[r]));
    n_ffn++;
  endtask

  initial begin
    int exp_asm, exp_vrec;
    layer = LW'(LAY); pcfg_we = 0; pcfg_is_v = 0; pcfg_layer = 0; pcfg_th = 0;
    qcfg_we = 0; qcfg_is_v = 0; qcfg_layer = 0; qcfg_bits = 0;
    for (int b = 0; b < 6; b++) cim_shift[b] = 5'((b == 5) ? SH_FF : SH_IN);
    w_we = 0; w_sel = 0; w_row = 0; w_data = '0; start_seq = 0; prefill_end = 0;
    tok_valid = 0; tok_x = '0; kvi_valid = 0; kvi_is_v = 0; kvi_tok = 0; kvi_g = 0;
    kvi_idx = 0; kvi_lbl = 0; kvi_q = '0; ctx_valid = 0; ctx = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    load_weights();
    @(negedge clk); pcfg_we = 1; pcfg_is_v = 0; pcfg_layer = LW'(LAY); pcfg_th = 8'(TH_K);
    @(negedge clk); pcfg_is_v = 1; pcfg_th = 8'(TH_V);
    @(negedge clk); pcfg_we = 0; qcfg_we = 1; qcfg_is_v = 0; qcfg_layer = LW'(LAY); qcfg_bits = 4'(BITS_K);
    @(negedge clk); qcfg_is_v = 1; qcfg_bits = 4'(BITS_V);
    @(negedge clk); qcfg_we = 0; start_seq = 1;
    @(negedge clk); start_seq = 0;
    check(qu_state == QS_PREFILL, "prefill state after start_seq");
    // prefill tokens back to back: the next projection overlaps the pruning
    for (int t = 0; t < NPRE; t++) send_token(t, 16, 0);
    while (!idle) @(negedge clk);
    check(n_kvo == 0, "nothing leaves the core before prefill_end");
    level0();
    prefill_end = 1;
    @(negedge clk); prefill_end = 0;
    while (qu_state != QS_DECODE) @(negedge clk);
    repeat (3) @(negedge clk);
    check(n_kvo == NPRE * G, $sformatf("prefill groups out %0d exp %0d", n_kvo, NPRE * G));
    exp_asm = 0; exp_vrec = 0;
    for (int d = 0; d < NDEC; d++) begin
      int t, amp;
      t = NPRE + d;
      amp = 16 + 16 * d; if (amp > 127) amp = 127;
      send_token(t, amp, 1);
      decode_ref(t);
      repeat (2) @(negedge clk);
      check(n_kvo == (t + 1) * G, $sformatf("decode groups out %0d exp %0d", n_kvo, (t + 1) * G));
      // read the whole cache back after every RB_EVERY-th token, else only
      // the oldest and the newest token
      for (int r = 0; r <= t; r++) if (d % RB_EVERY == 0 || r == 0 || r == t) begin
        read_back(r);
        exp_asm++; exp_vrec++;
      end
      while (n_asm < exp_asm || n_vrec < exp_vrec || !idle) @(negedge clk);
    end
    for (int f = 0; f < NFFN; f++) ffn_pass();
    repeat (5) @(negedge clk);
    check(n_diag == NT, $sformatf("diagonal scores %0d exp %0d", n_diag, NT));
    check(n_asm == exp_asm && n_vrec == exp_vrec, "reconstructed K scores and V tokens");
    $display("mechanisms: pipelined=%0d prune=%0d quant=%0d level=%0d (ref %0d) sat=%0d (ref %0d) dq_skip=%0d ce_skip=%0d diag=%0d asm=%0d vrec=%0d ffn=%0d",
             n_overlap, n_prune, n_quant, n_level, n_ref_ext, n_sat, n_ref_sat, n_dqskip, n_ceskip, n_diag, n_asm, n_vrec, n_ffn);
    check(n_prune > 0, "mechanism: pruning");
    check(n_overlap > 0, "mechanism: token path pipelining (projection during pruning)");
    check(n_quant == G + NPRE * G, $sformatf("mechanism: QUANT state %0d cycles exp %0d", n_quant, G + NPRE * G));
    check(n_level > 0 && n_ref_ext > 0, "mechanism: HQE level creation");
    if (REQ_SAT) check(n_sat > 0 && n_ref_sat > 0, "mechanism: saturation with all levels used");
    check(n_dqskip > 0, "mechanism: dequantizer multiply skip");
    check(n_ceskip > 0, "mechanism: engine zero skip");
    check(n_diag > 0, "mechanism: diagonal score");
    check(n_asm > 0, "mechanism: reconstructed-K score");
    check(n_vrec > 0, "mechanism: reconstructed V");
    check(n_ffn > 0, "mechanism: FFN chain");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
