// tb_dequantization_unit -- self-checking test of the dequantization unit.
//
// A behavioural scale-zero buffer with random HQE levels per channel (random
// level counts and start tokens) answers the unit's read port one cycle after
// the address. Random compressed groups (index, label, packed codes, some
// codes equal to the zero point) stream in back to back; every output lane is
// checked against the reference (pruned -> 0, code 0 -> base, code = z -> 0,
// else (q - z) * s), together with the multiply/skip counts and the two-cycle
// latency.
module tb_dequantization_unit;
  import titanus_pkg::*;
  `include "tb_ref.svh"
  localparam int D = 64, LANES = 16, LEVELS = 8, G = 4, N = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_is_v, sz_re, sz_rsel_v, out_valid, out_is_v;
  logic [TOK_W-1:0] in_tok, out_tok;
  logic [2:0] in_g, sz_raddr, out_g;
  logic [LANES-1:0] in_idx, in_lbl;
  logic [LANES-1:0][7:0] in_q;
  sz_entry_t [LANES-1:0][LEVELS-1:0] sz_rdata;
  logic [LANES-1:0][3:0] sz_rnlev;
  i8_t [LANES-1:0] out_x;
  logic [4:0] mul_cnt, skip_cnt;

  dequantization_unit #(.D(D), .LANES(LANES), .LEVELS(LEVELS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // behavioural SZ buffer
  sz_entry_t lv [2][G][LANES][LEVELS];
  int nlv [2][G][LANES];
  always_ff @(posedge clk) if (sz_re)
    for (int b = 0; b < LANES; b++) begin
      sz_rnlev[b] <= 4'(nlv[sz_rsel_v][sz_raddr][b]);
      for (int l = 0; l < LEVELS; l++) sz_rdata[b][l] <= lv[sz_rsel_v][sz_raddr][b][l];
    end

  // expected outputs, indexed by input order
  int exp_x [N][LANES], exp_mul [N], exp_skip [N], exp_tok [N], exp_g [N], exp_v [N], sent_at [N];
  int bits_g;
  int n_base = 0, n_zp = 0, n_mul = 0;

  initial begin
    in_valid = 0; in_is_v = 0; in_tok = 0; in_g = 0; in_idx = 0; in_lbl = 0; in_q = '0;
    bits_g = 3;
    for (int kv = 0; kv < 2; kv++) for (int g = 0; g < G; g++) for (int b = 0; b < LANES; b++) begin
      int st;
      nlv[kv][g][b] = $urandom_range(1, LEVELS);
      st = 0;
      for (int l = 0; l < LEVELS; l++) begin
        int mn, mx, s, z;
        mn = $urandom_range(0, 120) - 100;
        mx = mn + $urandom_range(1, 100);
        s = ref_scale(mn, mx, bits_g);
        z = ref_zp(mn, s, bits_g);
        lv[kv][g][b][l].scale = 16'(s);
        lv[kv][g][b][l].zp = 8'(z);
        lv[kv][g][b][l].base = i8_t'(ref_deq(0, z, s));
        lv[kv][g][b][l].start = TOK_W'(st);
        st += $urandom_range(1, 60);
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      int kv, g, t, k;
      logic [LANES-1:0] idx, lbl;
      logic [LANES-1:0][7:0] q;
      @(negedge clk);
      kv = $urandom_range(0, 1); g = $urandom_range(0, G - 1); t = $urandom_range(0, 500);
      k = 0; q = '0; exp_mul[n] = 0; exp_skip[n] = 0;
      for (int b = 0; b < LANES; b++) begin
        int l, code;
        sz_entry_t e;
        l = 0;
        for (int j = 1; j < nlv[kv][g][b]; j++) if (int'(lv[kv][g][b][j].start) <= t) l = j;
        e = lv[kv][g][b][l];
        idx[b] = $urandom_range(0, 3) != 0;
        lbl[b] = idx[b] && ($urandom_range(0, 3) != 0);
        code = $urandom_range(1, ref_qmax(bits_g));
        if (b % 5 == 0) code = (e.zp == 0) ? 1 : int'(e.zp);
        if (!idx[b]) exp_x[n][b] = 0;
        else if (!lbl[b]) begin exp_x[n][b] = int'(e.base); exp_skip[n]++; n_base++; end
        else if (code == int'(e.zp)) begin exp_x[n][b] = 0; exp_skip[n]++; n_zp++; end
        else begin exp_x[n][b] = ref_deq(code, int'(e.zp), int'(e.scale)); exp_mul[n]++; n_mul++; end
        if (lbl[b]) begin q[k] = 8'(code); k++; end
      end
      for (int j = k; j < LANES; j++) q[j] = 8'($urandom);
      exp_tok[n] = t; exp_g[n] = g; exp_v[n] = kv;
      in_valid = (n % 7 != 3) || 1'b1;
      in_is_v = kv[0]; in_tok = TOK_W'(t); in_g = 3'(g); in_idx = idx; in_lbl = lbl; in_q = q;
      sent_at[n] = cyc;
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(negedge clk);
    check(n_base > 50 && n_zp > 50 && n_mul > 50, "coverage of the three rules");
    check(rx == N, $sformatf("%0d outputs for %0d inputs", rx, N));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int rx = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n) begin
    #1;
    if (out_valid) begin
      check(rx < N, "extra output");
      if (rx < N) begin
        check(cyc - sent_at[rx] == 2, $sformatf("latency %0d", cyc - sent_at[rx]));
        check(int'(out_tok) == exp_tok[rx] && int'(out_g) == exp_g[rx] && int'(out_is_v) == exp_v[rx], "tags");
        for (int b = 0; b < LANES; b++)
          check(int'(out_x[b]) == exp_x[rx][b], $sformatf("n%0d lane %0d x=%0d exp %0d", rx, b, int'(out_x[b]), exp_x[rx][b]));
        check(int'(mul_cnt) == exp_mul[rx] && int'(skip_cnt) == exp_skip[rx], "mul/skip counts");
      end
      rx++;
    end
  end
endmodule
