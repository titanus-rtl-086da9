// tb_channel_monitor -- self-checking test of the decode-stage channel monitor.
//
// Each lane gets a random current level (built with the reference from a
// random range) and a random element, in or out of the tolerance range.
// Checks the out-of-range decision, the new level's range, scale, zero point
// and tolerance range, the SZ entry, saturation when no level is left, and
// the codes and labels of the quantized token.
module tb_channel_monitor;
  import titanus_pkg::*;
  `include "tb_ref.svh"
  localparam int LANES = 16, LEVELS = 8;

  logic [3:0] bits;
  logic [TOK_W-1:0] tok;
  logic [LANES-1:0] idx, ext, sat, label;
  i8_t [LANES-1:0] x;
  logic [LANES-1:0][2:0] cur_lev, nxt_lev;
  logic [LANES-1:0][15:0] cur_scale, nxt_scale;
  logic [LANES-1:0][7:0] cur_zp, nxt_zp, q_nz;
  tr_t [LANES-1:0] cur_lo, cur_hi, nxt_lo, nxt_hi;
  sz_entry_t [LANES-1:0] sz_entry;
  logic [4:0] cnt;

  channel_monitor #(.LANES(LANES), .LEVELS(LEVELS)) dut (.*);

  int checks = 0, failures = 0;
  int n_ext = 0, n_sat = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 300; r++) begin
      int b, n, lo[LANES], hi[LANES], s[LANES], z[LANES], xs[LANES], lv[LANES];
      b = $urandom_range(2, 8);
      bits = 4'(b);
      tok = TOK_W'($urandom_range(1, 1023));
      for (int i = 0; i < LANES; i++) begin
        int rmn, rmx;
        rmn = $urandom_range(0, 160) - 80;
        rmx = rmn + $urandom_range(0, 60);
        s[i] = ref_scale(rmn, rmx, b);
        z[i] = ref_zp(rmn, s[i], b);
        lo[i] = rmn - s[i] / 512;
        hi[i] = rmx + s[i] / 512;
        lv[i] = $urandom_range(0, LEVELS - 1);
        cur_lev[i] = 3'(lv[i]);
        cur_scale[i] = 16'(s[i]);
        cur_zp[i] = 8'(z[i]);
        cur_lo[i] = tr_t'(lo[i]);
        cur_hi[i] = tr_t'(hi[i]);
        xs[i] = $urandom_range(0, 255) - 128;
        if (i % 4 == 0) xs[i] = lo[i];          // on the edge: inside
        if (i % 4 == 1 && hi[i] < 127) xs[i] = hi[i] + 1;  // just outside
        if (xs[i] == 0) xs[i] = 1;
        x[i] = i8_t'(xs[i]);
        idx[i] = $urandom_range(0, 4) != 0;
      end
      #10;
      n = 0;
      for (int i = 0; i < LANES; i++) begin
        logic oor, e;
        int ns, nz, nlo, nhi, q;
        oor = idx[i] && (xs[i] < lo[i] || xs[i] > hi[i]);
        e = oor && lv[i] < LEVELS - 1;
        check(ext[i] == e && sat[i] == (oor && !e), $sformatf("r%0d lane %0d ext/sat", r, i));
        if (e) begin
          int elo, ehi;
          n_ext++;
          elo = (xs[i] < lo[i]) ? xs[i] : lo[i];
          ehi = (xs[i] > hi[i]) ? xs[i] : hi[i];
          ns = ref_scale(elo, ehi, b);
          nz = ref_zp(elo, ns, b);
          nlo = elo - ns / 512;
          nhi = ehi + ns / 512;
          check(int'(nxt_lev[i]) == lv[i] + 1, "next level");
          check(int'(sz_entry[i].scale) == ns && int'(sz_entry[i].zp) == nz &&
                int'(sz_entry[i].base) == ref_deq(0, nz, ns) && sz_entry[i].start == tok,
                $sformatf("SZ entry lane %0d", i));
        end else begin
          if (oor) n_sat++;
          ns = s[i]; nz = z[i]; nlo = lo[i]; nhi = hi[i];
          check(int'(nxt_lev[i]) == lv[i], "level kept");
        end
        check(int'(nxt_scale[i]) == ns && int'(nxt_zp[i]) == nz, $sformatf("next params lane %0d", i));
        check(int'(nxt_lo[i]) == nlo && int'(nxt_hi[i]) == nhi, $sformatf("next TR lane %0d", i));
        q = idx[i] ? ref_quant(xs[i], ns, nz, b) : 0;
        check(label[i] == (q != 0), "label");
        if (q != 0) begin
          check(int'(q_nz[n]) == q, $sformatf("code lane %0d", i));
          n++;
        end
      end
      check(int'(cnt) == n, "count");
    end
    check(n_ext > 100 && n_sat > 10, $sformatf("coverage ext %0d sat %0d", n_ext, n_sat));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
