// tb_tolerance_updater -- self-checking test of the tolerance updater.
//
// Drives random level ranges and scales and checks that the tolerance range
// is [rmin - s/2, rmax + s/2] with s/2 taken in whole int8 units.
module tb_tolerance_updater;
  import titanus_pkg::*;
  localparam int LANES = 16;

  tr_t [LANES-1:0] rmin, rmax, tr_lo, tr_hi;
  logic [LANES-1:0][15:0] scale;

  tolerance_updater #(.LANES(LANES)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 200; r++) begin
      int lo[LANES], hi[LANES], s[LANES];
      for (int i = 0; i < LANES; i++) begin
        lo[i] = $urandom_range(0, 255) - 128;
        hi[i] = lo[i] + $urandom_range(0, 127 - lo[i]);
        s[i]  = $urandom_range(1, 30000);
        rmin[i] = tr_t'(lo[i]);
        rmax[i] = tr_t'(hi[i]);
        scale[i] = 16'(s[i]);
      end
      #10;
      for (int i = 0; i < LANES; i++) begin
        int h;
        h = int'($floor(real'(s[i]) / 512.0));
        check(int'(tr_lo[i]) == lo[i] - h && int'(tr_hi[i]) == hi[i] + h,
              $sformatf("lane %0d s=%0d lo %0d hi %0d", i, s[i], tr_lo[i], tr_hi[i]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
