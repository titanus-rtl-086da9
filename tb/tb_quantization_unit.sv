// tb_quantization_unit -- self-checking test of the quantization unit (HQE).
//
// Runs two sequences of prefill and decode tokens through the unit with a
// reference model of cascade quantization with hierarchical levels:
//   prefill -- per-channel max/min of the non-zero data, level-0 scale, zero
//              point and tolerance range, quantization of every buffered
//              token after prefill_end;
//   decode  -- per-token range check, new level when out of range (the
//              range grows to cover the element), clamp when no level is left.
// Checks every compressed output group (token, group, index, label, packed
// codes, count), every SZ-buffer write, the QUANT-state length (G + P*G
// cycles), in_ready during QUANT, the one-cycle decode latency, and that level
// extension and saturation both happened.
module tb_quantization_unit;
  import titanus_pkg::*;
  `include "tb_ref.svh"
  localparam int D = 48, LANES = 16, LAYERS = 12, MAXP = 8, LEVELS = 4, G = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we, cfg_is_v, start_seq, prefill_end, quant_done, in_ready, in_valid, in_last;
  logic [3:0] cfg_layer, layer, cfg_bits;
  qu_state_e state;
  logic [1:0] in_g, out_g, sz_waddr;
  logic [LANES-1:0] in_idx_k, in_idx_v, out_idx_k, out_lbl_k, out_idx_v, out_lbl_v;
  i8_t [LANES-1:0] in_nz_k, in_nz_v;
  logic out_valid, sz_clear, ev_ext, ev_sat;
  logic [TOK_W-1:0] out_tok;
  logic [LANES-1:0][7:0] out_q_k, out_q_v;
  logic [4:0] out_cnt_k, out_cnt_v;
  logic [LANES-1:0] sz_we_k, sz_we_v;
  logic [LANES-1:0][1:0] sz_wlevel_k, sz_wlevel_v;
  sz_entry_t [LANES-1:0] sz_wdata_k, sz_wdata_v;

  quantization_unit #(.D(D), .LANES(LANES), .LAYERS(LAYERS), .MAXP(MAXP), .LEVELS(LEVELS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- reference model ----------------
  int bits [2];
  int pre [MAXP][2][D];             // prefill data (0 = pruned)
  int st_lev [2][D], st_s [2][D], st_z [2][D], st_lo [2][D], st_hi [2][D];
  int n_ext = 0, n_sat = 0;

  // expected outputs, in order
  typedef struct { int tok; int g; int x [2][LANES]; int s [2][LANES]; int z [2][LANES]; } exp_t;
  exp_t expq [$];
  // expected SZ writes
  typedef struct { int kv; int g; int lane; int lev; int s; int z; int base; int start; } szw_t;
  szw_t expw [$];

  // ---------------- driving ----------------
  task automatic send_token(input int xs [2][D]);
    for (int g = 0; g < G; g++) begin
      int nk, nv;
      @(negedge clk);
      check(in_ready, "in_ready for a token");
      nk = 0; nv = 0; in_nz_k = '0; in_nz_v = '0;
      for (int i = 0; i < LANES; i++) begin
        in_idx_k[i] = xs[0][g*LANES+i] != 0;
        in_idx_v[i] = xs[1][g*LANES+i] != 0;
        if (in_idx_k[i]) begin in_nz_k[nk] = i8_t'(xs[0][g*LANES+i]); nk++; end
        if (in_idx_v[i]) begin in_nz_v[nv] = i8_t'(xs[1][g*LANES+i]); nv++; end
      end
      in_valid = 1; in_g = 2'(g); in_last = (g == G - 1);
    end
    @(negedge clk); in_valid = 0;
  endtask

  function automatic int rnd_elem(input int lo, input int hi, input int zero_pct);
    if ($urandom_range(0, 99) < zero_pct) return 0;
    return $urandom_range(lo + 128, hi + 128) - 128;
  endfunction

  int exp_tok_ctr = 1 << 20;

  task automatic run_sequence(input int P, input int ndec, input int spread);
    int xs [2][D];
    int mx [2][D], mn [2][D];
    int t0, qcycles;
    exp_tok_ctr = 1 << 20;
    // configure bit-widths for layer 5
    bits[0] = $urandom_range(2, 4); bits[1] = $urandom_range(2, 4);
    @(negedge clk); cfg_we = 1; cfg_is_v = 0; cfg_layer = 4'd5; cfg_bits = 4'(bits[0]);
    @(negedge clk); cfg_we = 1; cfg_is_v = 1; cfg_layer = 4'd5; cfg_bits = 4'(bits[1]);
    @(negedge clk); cfg_we = 0; layer = 4'd5;
    start_seq = 1;
    @(negedge clk); start_seq = 0;
    check(state == QS_PREFILL, "prefill state");
    for (int kv = 0; kv < 2; kv++) for (int c = 0; c < D; c++) begin mx[kv][c] = -128; mn[kv][c] = 127; end
    for (int t = 0; t < P; t++) begin
      for (int kv = 0; kv < 2; kv++) for (int c = 0; c < D; c++) begin
        xs[kv][c] = rnd_elem(-spread, spread, 25);
        if (c == 7) xs[kv][c] = 0;             // a channel that never sees data
        pre[t][kv][c] = xs[kv][c];
        if (xs[kv][c] != 0) begin
          if (xs[kv][c] > mx[kv][c]) mx[kv][c] = xs[kv][c];
          if (xs[kv][c] < mn[kv][c]) mn[kv][c] = xs[kv][c];
        end
      end
      send_token(xs);
      check(!out_valid, "no output during prefill");
    end
    // level 0 of every channel
    for (int g = 0; g < G; g++) for (int kv = 0; kv < 2; kv++) for (int i = 0; i < LANES; i++) begin
      int c, lo, hi, s, z;
      szw_t w;
      c = g * LANES + i;
      lo = (mx[kv][c] < mn[kv][c]) ? 0 : mn[kv][c];
      hi = (mx[kv][c] < mn[kv][c]) ? 0 : mx[kv][c];
      s = ref_scale(lo, hi, bits[kv]);
      z = ref_zp(lo, s, bits[kv]);
      st_lev[kv][c] = 0; st_s[kv][c] = s; st_z[kv][c] = z;
      st_lo[kv][c] = lo - s / 512; st_hi[kv][c] = hi + s / 512;
      w = '{kv: kv, g: g, lane: i, lev: 0, s: s, z: z, base: ref_deq(0, z, s), start: 0};
      expw.push_back(w);
    end
    for (int t = 0; t < P; t++) for (int g = 0; g < G; g++) begin
      exp_t e;
      e.tok = t; e.g = g;
      for (int kv = 0; kv < 2; kv++) for (int i = 0; i < LANES; i++) begin
        e.x[kv][i] = pre[t][kv][g*LANES+i];
        e.s[kv][i] = st_s[kv][g*LANES+i];
        e.z[kv][i] = st_z[kv][g*LANES+i];
      end
      expq.push_back(e);
    end
    // close the prefill
    @(negedge clk); prefill_end = 1;
    @(negedge clk); prefill_end = 0;
    t0 = cyc;
    check(state == QS_QUANT && !in_ready, "QUANT state, not ready");
    while (state == QS_QUANT) @(negedge clk);
    qcycles = cyc - t0;
    check(qcycles == G + P * G, $sformatf("QUANT cycles %0d exp %0d", qcycles, G + P * G));
    @(negedge clk);
    check(state == QS_DECODE, "decode state");
    check(expq.size() == 0, $sformatf("all prefill outputs seen, %0d left", expq.size()));
    // decode tokens: mostly in range, some far outside
    exp_tok_ctr = P;
    for (int t = 0; t < ndec; t++) begin
      for (int kv = 0; kv < 2; kv++) for (int c = 0; c < D; c++)
        xs[kv][c] = ($urandom_range(0, 99) < 8) ? rnd_elem(-128, 127, 10) : rnd_elem(-spread, spread, 25);
      for (int g = 0; g < G; g++) begin
        exp_t e;
        e.tok = P + t; e.g = g;
        for (int kv = 0; kv < 2; kv++) for (int i = 0; i < LANES; i++) begin
          int c, x;
          c = g * LANES + i;
          x = xs[kv][c];
          if (x != 0 && (x < st_lo[kv][c] || x > st_hi[kv][c])) begin
            if (st_lev[kv][c] < LEVELS - 1) begin
              int elo, ehi, s, z;
              szw_t w;
              elo = (x < st_lo[kv][c]) ? x : st_lo[kv][c];
              ehi = (x > st_hi[kv][c]) ? x : st_hi[kv][c];
              s = ref_scale(elo, ehi, bits[kv]);
              z = ref_zp(elo, s, bits[kv]);
              st_lev[kv][c]++; st_s[kv][c] = s; st_z[kv][c] = z;
              st_lo[kv][c] = elo - s / 512; st_hi[kv][c] = ehi + s / 512;
              w = '{kv: kv, g: g, lane: i, lev: st_lev[kv][c], s: s, z: z,
                    base: ref_deq(0, z, s), start: P + t};
              expw.push_back(w);
              n_ext++;
            end else n_sat++;
          end
          e.x[kv][i] = x; e.s[kv][i] = st_s[kv][c]; e.z[kv][i] = st_z[kv][c];
        end
        expq.push_back(e);
      end
      send_token(xs);
    end
    @(negedge clk);
    @(negedge clk);
    check(expq.size() == 0, "all decode outputs seen");
    check(expw.size() == 0, $sformatf("all SZ writes seen, %0d left", expw.size()));
  endtask

  // ---------------- output and SZ-write monitors ----------------
  int last_in_cyc;
  always @(posedge clk) if (in_valid && in_ready && state == QS_DECODE) last_in_cyc <= cyc + 1;

  always @(posedge clk) if (rst_n) begin
    #1;
    if (out_valid) begin
      if (expq.size() == 0) check(0, "unexpected output");
      else begin
        exp_t e;
        e = expq.pop_front();
        check(int'(out_tok) == e.tok && int'(out_g) == e.g,
              $sformatf("out tag t%0d g%0d exp t%0d g%0d", out_tok, out_g, e.tok, e.g));
        if (state == QS_DECODE && int'(out_tok) >= exp_tok_ctr)
          check(cyc == last_in_cyc, $sformatf("decode latency one cycle t%0d g%0d cyc %0d in %0d", e.tok, e.g, cyc, last_in_cyc));
        for (int kv = 0; kv < 2; kv++) begin
          int n;
          n = 0;
          for (int i = 0; i < LANES; i++) begin
            int q;
            logic ix, lb;
            ix = kv ? out_idx_v[i] : out_idx_k[i];
            lb = kv ? out_lbl_v[i] : out_lbl_k[i];
            q = (e.x[kv][i] != 0) ? ref_quant(e.x[kv][i], e.s[kv][i], e.z[kv][i], bits[kv]) : 0;
            check(ix == (e.x[kv][i] != 0), $sformatf("index t%0d kv%0d lane %0d", e.tok, kv, i));
            check(lb == (q != 0), $sformatf("label t%0d kv%0d lane %0d", e.tok, kv, i));
            if (q != 0) begin
              check(int'(kv ? out_q_v[n] : out_q_k[n]) == q,
                    $sformatf("code t%0d g%0d kv%0d lane %0d got %0d exp %0d", e.tok, e.g, kv, i,
                              kv ? out_q_v[n] : out_q_k[n], q));
              n++;
            end
          end
          check(int'(kv ? out_cnt_v : out_cnt_k) == n, "code count");
        end
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int kv = 0; kv < 2; kv++) for (int i = 0; i < LANES; i++) begin
      logic we;
      we = kv ? sz_we_v[i] : sz_we_k[i];
      if (we) begin
        int k;
        sz_entry_t d;
        k = -1;
        foreach (expw[j]) if (k < 0 && expw[j].kv == kv && expw[j].g == int'(sz_waddr) && expw[j].lane == i) k = j;
        d = kv ? sz_wdata_v[i] : sz_wdata_k[i];
        if (k < 0) check(0, $sformatf("unexpected SZ write kv%0d g%0d lane %0d", kv, sz_waddr, i));
        else begin
          check(int'(kv ? sz_wlevel_v[i] : sz_wlevel_k[i]) == expw[k].lev && int'(d.scale) == expw[k].s &&
                int'(d.zp) == expw[k].z && int'(d.base) == expw[k].base && int'(d.start) == expw[k].start,
                $sformatf("SZ write kv%0d g%0d lane %0d lev %0d", kv, sz_waddr, i, expw[k].lev));
          expw.delete(k);
        end
      end
    end
  end

  int n_ev_ext = 0, n_ev_sat = 0;
  always @(posedge clk) begin
    if (ev_ext) n_ev_ext++;
    if (ev_sat) n_ev_sat++;
  end

  initial begin
    cfg_we = 0; cfg_is_v = 0; cfg_layer = 0; cfg_bits = 0; layer = 0; start_seq = 0;
    prefill_end = 0; in_valid = 0; in_g = 0; in_last = 0; in_idx_k = 0; in_idx_v = 0;
    in_nz_k = '0; in_nz_v = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state == QS_IDLE, "idle after reset");
    run_sequence(4, 12, 40);
    run_sequence(MAXP, 10, 20);
    check(n_ext > 0 && n_sat > 0 && n_ev_ext > 0 && n_ev_sat > 0,
          $sformatf("level extension %0d / saturation %0d seen", n_ext, n_sat));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
