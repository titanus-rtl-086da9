// tb_nz_quantizer -- self-checking test of the prefill non-zero quantizer.
//
// Random per-channel ranges (including channels that saw no data), random
// bit-widths from 2 to 8 and random index maps; checks scale, zero point,
// base value, tolerance range, labels, packed codes and their count against
// the real-number reference.
module tb_nz_quantizer;
  import titanus_pkg::*;
  `include "tb_ref.svh"
  localparam int LANES = 16;

  logic [3:0] bits;
  i8_t [LANES-1:0] ch_max, ch_min, base, x;
  logic [LANES-1:0][15:0] scale;
  logic [LANES-1:0][7:0] zp, q_nz;
  tr_t [LANES-1:0] tr_lo, tr_hi;
  logic [LANES-1:0] idx, label;
  logic [4:0] cnt;

  nz_quantizer #(.LANES(LANES)) dut (.*);

  int checks = 0, failures = 0;
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
      int b, mn[LANES], mx[LANES], xs[LANES], n;
      b = (r < 7) ? r + 2 : $urandom_range(2, 8);
      bits = 4'(b);
      for (int i = 0; i < LANES; i++) begin
        if (i == 3 && r % 4 == 0) begin mn[i] = 127; mx[i] = -128; end
        else begin
          mn[i] = $urandom_range(0, 255) - 128;
          mx[i] = mn[i] + $urandom_range(0, 127 - mn[i]);
        end
        ch_min[i] = i8_t'(mn[i]);
        ch_max[i] = i8_t'(mx[i]);
        idx[i] = $urandom_range(0, 3) != 0;
        xs[i] = (mx[i] >= mn[i]) ? $urandom_range(mn[i] + 128, mx[i] + 128) - 128 : 5;
        if (xs[i] == 0) idx[i] = 0;
        x[i] = i8_t'(xs[i]);
      end
      #10;
      n = 0;
      for (int i = 0; i < LANES; i++) begin
        int lo, hi, s, z, q;
        lo = (mx[i] < mn[i]) ? 0 : mn[i];
        hi = (mx[i] < mn[i]) ? 0 : mx[i];
        s = ref_scale(lo, hi, b);
        z = ref_zp(lo, s, b);
        check(int'(scale[i]) == s, $sformatf("r%0d lane %0d scale %0d exp %0d", r, i, scale[i], s));
        check(int'(zp[i]) == z, $sformatf("lane %0d zp %0d exp %0d", i, zp[i], z));
        check(int'(base[i]) == ref_deq(0, z, s), "base");
        check(int'(tr_lo[i]) == lo - s / 512 && int'(tr_hi[i]) == hi + s / 512, "tolerance range");
        q = idx[i] ? ref_quant(xs[i], s, z, b) : 0;
        check(label[i] == (idx[i] && q != 0), $sformatf("label lane %0d", i));
        if (idx[i] && q != 0) begin
          check(int'(q_nz[n]) == q, $sformatf("code lane %0d got %0d exp %0d", i, q_nz[n], q));
          n++;
        end
      end
      check(int'(cnt) == n, "count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
