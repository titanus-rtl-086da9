// tb_titanus_core_workload -- the smallest end-to-end workload of the
// evaluation, one OPT-125M layer with 32 prefill tokens and 32 generated
// tokens, on the paper-size core (no parameter override). After every 8th
// generated token the whole compressed cache is read back and checked, in
// between only the oldest and the newest token. Larger prefill/generation
// sizes differ only in NPRE and NDEC. The test itself is tb_titanus_core_env;
// this wrapper only adds a last-resort stop a little after the environment's
// own watchdog, should that one never be reached.
module tb_titanus_core_workload;
  tb_titanus_core_env #(.D(768), .DFF(3072), .HEADS(12), .MAXP(128), .LEVELS(8),
                        .NPRE(32), .NDEC(32), .NFFN(1), .FULL(1), .REQ_SAT(0),
                        .RB_EVERY(8), .WATCHDOG(2000000)) env ();

  initial begin
    repeat (2100000) @(posedge env.clk);
    $display("FAIL: backstop watchdog");
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
