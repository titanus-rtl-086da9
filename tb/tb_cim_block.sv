// tb_cim_block -- self-checking test of the CIM matrix-vector block.
//
// Loads random int8 weights row by row, runs several input vectors with
// different requantization shifts, and checks every output against a
// reference dot product (rounded shift, int8 saturation) and the latency of
// OUT + 2 cycles from start to done.
module tb_cim_block;
  import titanus_pkg::*;
  `include "tb_ref.svh"
  localparam int IN = 20, OUT = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_we, start, busy, done;
  logic [$clog2(OUT+1)-1:0] w_row;
  i8_t [IN-1:0] w_data, x;
  logic [4:0] shift;
  i8_t [OUT-1:0] y;

  cim_block #(.IN(IN), .OUT(OUT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  i8_t w [OUT][IN];

  initial begin
    w_we = 0; start = 0; w_row = 0; w_data = '0; x = '0; shift = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < OUT; r++) begin
      @(negedge clk); w_we = 1; w_row = 4'(r);
      for (int i = 0; i < IN; i++) begin
        w[r][i] = i8_t'($urandom_range(0, 255));
        w_data[i] = w[r][i];
      end
    end
    @(negedge clk); w_we = 0;
    for (int t = 0; t < 8; t++) begin
      int t0, sh;
      sh = (t == 0) ? 0 : 4 + t;
      for (int i = 0; i < IN; i++) x[i] = i8_t'($urandom_range(0, 255));
      if (t == 1) x = '0;
      shift = 5'(sh);
      start = 1;
      @(posedge clk); t0 = $time / 10;
      @(negedge clk); start = 0;
      check(busy, "busy after start");
      while (!done) @(posedge clk);
      check(($time / 10) - t0 == OUT + 2, $sformatf("latency %0d", ($time / 10) - t0));
      #1;
      for (int r = 0; r < OUT; r++) begin
        longint acc;
        int e;
        acc = 0;
        for (int i = 0; i < IN; i++) acc += longint'(w[r][i]) * longint'(x[i]);
        e = (sh == 0) ? ref_sat8(acc) : ref_sat8(longint'($floor(real'(acc) / real'(1 << sh) + 0.5)));
        check(int'(y[r]) == e, $sformatf("t%0d row %0d y=%0d exp %0d", t, r, int'(y[r]), e));
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
