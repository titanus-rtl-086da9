// tb_computing_engine -- self-checking test of the computing engine.
//
// Runs dot products of lengths that hit the workload scheduler's three cases
// (len < 256, len = x*256, len = (x+y)*256) on random vectors with many
// zeros, and checks the result, the case number, the multiply and skip
// counts, which MUs were enabled, and the cycle count (done n chunks + 1
// clock edges after the edge that takes start).
module tb_computing_engine;
  import titanus_pkg::*;
  localparam int CAP = 256, MAXC = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, in_ready, in_valid, done;
  logic [15:0] len;
  i8_t [CAP-1:0] in_a, in_b;
  logic signed [31:0] result;
  logic [1:0] case_id;
  logic [31:0] mul_total, skip_total;
  logic [15:0] mu_en_seen;

  computing_engine dut (.*);

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

  task automatic run(input int n, input int zero_pct);
    i8_t a [MAXC*CAP], b [MAXC*CAP];
    longint exp_sum;
    int exp_mul, exp_skip, nch, t0, cyc, exp_case;
    logic [15:0] exp_en;
    exp_sum = 0; exp_mul = 0; exp_skip = 0; exp_en = '0;
    for (int j = 0; j < MAXC*CAP; j++) begin
      a[j] = ($urandom_range(0, 99) < zero_pct) ? 8'sd0 : i8_t'($urandom_range(0, 255));
      b[j] = ($urandom_range(0, 99) < zero_pct) ? 8'sd0 : i8_t'($urandom_range(0, 255));
      if (j < n) begin
        exp_sum += longint'(a[j]) * longint'(b[j]);
        if (a[j] != 0 && b[j] != 0) exp_mul++; else exp_skip++;
        // element j of a chunk: VPU (j%256)%4, MU ((j%256)/4)/16
        exp_en[((j % CAP) % 4) * 4 + ((j % CAP) / 4) / 16] = 1'b1;
      end
    end
    nch = (n + CAP - 1) / CAP;
    exp_case = (n < CAP) ? 1 : (n % CAP == 0) ? 2 : 3;
    @(negedge clk);
    start = 1; len = 16'(n);
    @(posedge clk); t0 = $time / 10;
    @(negedge clk); start = 0;
    for (int c = 0; c < nch; c++) begin
      for (int k = 0; k < CAP; k++) begin
        in_a[k] = a[c*CAP + k];
        in_b[k] = b[c*CAP + k];
      end
      in_valid = 1;
      check(in_ready, "in_ready during chunks");
      @(negedge clk);
    end
    in_valid = 0;
    cyc = 0;
    while (!done && cyc < 20) begin @(posedge clk); #1; cyc++; end
    check(done, "done");
    check(result == 32'(exp_sum), $sformatf("len %0d result %0d exp %0d", n, result, exp_sum));
    check(int'(case_id) == exp_case, $sformatf("case %0d exp %0d", case_id, exp_case));
    check(mul_total == 32'(exp_mul) && skip_total == 32'(exp_skip),
          $sformatf("mul %0d/%0d skip %0d/%0d", mul_total, exp_mul, skip_total, exp_skip));
    check(mu_en_seen == exp_en, $sformatf("MU enables %h exp %h", mu_en_seen, exp_en));
    check(($time / 10) - t0 == nch + 1, $sformatf("cycles %0d exp %0d", ($time/10) - t0, nch + 1));
    check(!in_ready, "idle after done");
  endtask

  initial begin
    start = 0; len = 0; in_valid = 0; in_a = '0; in_b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(64, 30);     // one attention head
    run(1, 0);
    run(17, 50);
    run(256, 30);
    run(512, 40);
    run(1024, 20);
    run(300, 30);
    run(700, 60);
    run(255, 0);
    for (int r = 0; r < 10; r++) run($urandom_range(1, MAXC*CAP), $urandom_range(0, 90));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
