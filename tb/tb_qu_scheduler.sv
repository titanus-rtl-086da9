// tb_qu_scheduler -- self-checking test of the quantization unit's scheduler.
//
// Walks the four states for several prefill lengths (including none) and
// checks the one-cycle clear, the order and number of parameter steps (G) and
// token-group steps (n_tok x G), quant_done on the last step, and the
// cycle count of the QUANT state.
module tb_qu_scheduler;
  import titanus_pkg::*;
  localparam int G = 5, MAXP = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start_seq, prefill_end, clear, param_step, quant_step, quant_done;
  logic [3:0] n_tok, q_t;
  logic [2:0] q_g;
  qu_state_e state;

  qu_scheduler #(.G(G), .MAXP(MAXP)) dut (.*);

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

  task automatic run_seq(input int n);
    int cyc, np, nq;
    @(negedge clk); start_seq = 1;
    @(negedge clk); start_seq = 0;
    check(clear, "clear pulse");
    check(state == QS_PREFILL, "prefill state");
    @(negedge clk);
    check(!clear, "clear one cycle");
    n_tok = 4'(n);
    repeat (3) @(negedge clk);
    check(state == QS_PREFILL && !param_step && !quant_step, "waits in prefill");
    prefill_end = 1;
    @(negedge clk); prefill_end = 0;
    check(state == QS_QUANT, "quant state");
    cyc = 0; np = 0; nq = 0;
    while (state == QS_QUANT && cyc < 200) begin
      if (param_step) begin
        check(int'(q_g) == np, $sformatf("param step %0d group %0d", np, q_g));
        np++;
      end
      if (quant_step) begin
        check(int'(q_g) == nq % G && int'(q_t) == nq / G, $sformatf("quant step %0d", nq));
        nq++;
      end
      check(quant_done == ((n == 0) ? (np == G && param_step) : (nq == n * G && quant_step)),
            $sformatf("quant_done at p%0d q%0d", np, nq));
      cyc++;
      @(negedge clk);
    end
    check(np == G && nq == n * G, $sformatf("steps p%0d q%0d n%0d", np, nq, n));
    check(cyc == G + n * G, $sformatf("quant cycles %0d", cyc));
    check(state == QS_DECODE, "decode state");
    repeat (3) @(negedge clk);
    check(state == QS_DECODE && !param_step && !quant_step, "stays in decode");
  endtask

  initial begin
    start_seq = 0; prefill_end = 0; n_tok = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state == QS_IDLE, "idle after reset");
    run_seq(3);
    run_seq(1);
    run_seq(0);
    run_seq(MAXP);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
