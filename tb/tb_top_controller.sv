// tb_top_controller -- self-checking test of the core's sequencing.
//
// The tb plays every block around the controller: Q, K and V projections with
// random latencies, a pruning unit that ends a token a random time after its
// start, computing engines with a fixed latency, a stream of reconstructed-K
// scoring requests, and the Out/FC1/FC2 chain with fixed latencies. It checks:
//   * a token is taken only when tok_ready is high, and tok_ready is low from
//     the acceptance of a token until its diagonal score is done;
//   * the token path is pipelined: a token may enter while the pruning unit
//     still streams the previous one (counted; zero is a failure);
//   * pu_start comes once per token, in the first cycle in which Q, K and V
//     are done and the pruning unit is free, never while it is busy;
//   * the first engine start after pu_start is the diagonal (fresh K), one cycle
//     later when the engines are free, and diagonal goes before a waiting
//     reconstructed-K request;
//   * the engines are never started while busy, and a reconstructed-K request
//     is never granted while the query is being recomputed;
//   * the FFN chain starts each stage in the cycle the previous one is done,
//     and gives one y_valid per context vector;
//   * every token, diagonal, grant and FFN pass was seen (counts).
module tb_top_controller;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tok_valid, tok_ready, pu_ready, qu_ready, qkv_start, q_done, k_done, v_done;
  logic pu_start, pu_last, q_busy, ce_start, ce_sel_asm, ce_done, asm_req, asm_grant, idle;
  logic ctx_valid, ctx_ready, out_start, out_done, fc1_start, fc1_done, fc2_start, fc2_done, y_valid;

  top_controller dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s @%0t", what, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int CE_LAT = 5, OUT_LAT = 7, FC1_LAT = 9, FC2_LAT = 11;
  int cyc = 0;

  // environment state
  int qc, kc, vc, puc, cec, outc, fc1c, fc2c;       // countdowns, 0 = idle
  int ntok = 0, ndiag = 0, nasm = 0, nffn = 0, nctx = 0, n_asm_req = 0;
  int last_done_cyc, pu_start_cyc, pend_diag;
  int in_flight;                 // accepted, diagonal score not yet done
  int n_overlap = 0;             // tokens accepted while the PU still streams
  logic pu_rnd;
  int proj = 0;                  // accepted, pruning not yet started
  logic stop = 0;

  assign q_done   = (qc == 1);
  assign k_done   = (kc == 1);
  assign v_done   = (vc == 1);
  assign q_busy   = (qc != 0);
  assign pu_last  = (puc == 1);
  assign pu_ready = (puc <= 1) && pu_rnd;
  assign ce_done  = (cec == 1);
  assign out_done = (outc == 1);
  assign fc1_done = (fc1c == 1);
  assign fc2_done = (fc2c == 1);

  // Checks and environment updates run at the rising edge and read the values
  // from before the edge (everything driven here uses non-blocking updates).
  int diag_busy, pu_done, diag_free_next;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      qc <= 0; kc <= 0; vc <= 0; puc <= 0; cec <= 0; outc <= 0; fc1c <= 0; fc2c <= 0;
      in_flight = 0; pend_diag = 0; diag_busy = 0; pu_done = 0;
    end else begin
      if (qkv_start) begin
        check(tok_valid && tok_ready, "qkv_start without handshake");
        check(in_flight == 0, "token accepted before the previous diagonal finished");
        if (puc > 1) n_overlap++;
      end
      if (in_flight) check(!tok_ready, "tok_ready while a token is in flight");
      if (proj && cyc >= last_done_cyc && pu_ready)
        check(pu_start, "pu_start not in the first cycle with Q/K/V done and the PU free");
      if (pu_start) begin
        check(in_flight == 1 && qc <= 1 && kc <= 1 && vc <= 1, "pu_start before Q/K/V done");
        check(puc <= 1, "pu_start while the pruning unit is busy");
        check(cyc >= last_done_cyc, "pu_start before the last done");
      end
      if (ce_start) begin
        check(cec == 0 || ce_done, "engines started while busy");
        if (!ce_sel_asm) begin
          check(pend_diag == 1, "diagonal without a token");
          if (diag_free_next) check(cyc == pu_start_cyc + 1, "diagonal not right after pu_start");
          pend_diag = 0; diag_busy = 1; ndiag++;
        end else begin
          check(asm_grant && asm_req, "reconstructed-K start without grant");
          check(!q_busy, "grant while query recomputed");
          check(pend_diag == 0, "reconstructed K before the pending diagonal");
          nasm++;
        end
      end
      if (pu_start) begin
        pu_start_cyc = cyc; pend_diag = 1;
        diag_free_next = !ce_start && (cec == 0 || ce_done);
      end
      if (fc1_start) check(out_done, "fc1 start not on out done");
      if (fc2_start) check(fc1_done, "fc2 start not on fc1 done");
      if (y_valid) begin check(fc2_done, "y_valid not on fc2 done"); nffn++; end
      if (out_start) begin check(ctx_valid && ctx_ready && outc == 0 && fc1c == 0 && fc2c == 0,
                                 "out start while FFN busy"); nctx++; end
      // ---- environment ----
      if (qkv_start) begin
        int a, b, c;
        a = $urandom_range(3, 12); b = $urandom_range(3, 12); c = $urandom_range(3, 12);
        qc <= a; kc <= b; vc <= c;
        last_done_cyc = cyc + ((a > b) ? ((a > c) ? a : c) : ((b > c) ? b : c));
        in_flight = 1; proj = 1; ntok++;
      end else begin
        if (qc > 0) qc <= qc - 1;
        if (kc > 0) kc <= kc - 1;
        if (vc > 0) vc <= vc - 1;
      end
      if (pu_start) begin puc <= $urandom_range(2, 20); proj = 0; end
      else if (puc > 0) puc <= puc - 1;
      if (pu_last) pu_done = 1;
      if (ce_done && !ce_start && diag_busy) diag_busy = 0;
      if (ce_done && ce_start && diag_busy && ce_sel_asm) diag_busy = 0;
      if (ce_start) cec <= CE_LAT;
      else if (cec > 0) cec <= cec - 1;
      if (out_start) outc <= OUT_LAT; else if (outc > 0) outc <= outc - 1;
      if (fc1_start) fc1c <= FC1_LAT; else if (fc1c > 0) fc1c <= fc1c - 1;
      if (fc2_start) fc2c <= FC2_LAT; else if (fc2c > 0) fc2c <= fc2c - 1;
      if (in_flight && !pend_diag && !diag_busy && ndiag == ntok) in_flight = 0;
    end
  end

  // token source, request sources
  always @(posedge clk) begin
    if (!rst_n) begin
      tok_valid <= 0; asm_req <= 0; ctx_valid <= 0; pu_rnd <= 1; qu_ready <= 1;
    end else begin
      if (qkv_start || !tok_valid) tok_valid <= !stop && ($urandom_range(0, 3) == 0);
      if (asm_grant || !asm_req) begin
        asm_req <= ($urandom_range(0, 2) == 0);
        if (asm_grant) n_asm_req++;
      end
      if (out_start || !ctx_valid) ctx_valid <= ($urandom_range(0, 9) == 0);
      pu_rnd <= ($urandom_range(0, 9) != 0);
      qu_ready <= ($urandom_range(0, 9) != 0);
    end
  end

  // tok_ready must return once the token path is quiet
  int idle_wait = 0;
  always @(posedge clk) if (rst_n) begin
    if (in_flight == 0 && qu_ready && cec == 0 && !tok_ready) idle_wait++;
    else idle_wait = 0;
    if (idle_wait == 3) check(0, $sformatf("tok_ready stuck low ts=%0d cs=%0d if=%0d", dut.ts, dut.cs, in_flight));
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (6000) @(posedge clk);
    stop = 1;
    repeat (200) @(posedge clk);
    check(ntok > 50, $sformatf("tokens %0d", ntok));
    check(ndiag == ntok, $sformatf("diagonals %0d tokens %0d", ndiag, ntok));
    check(nasm > 50 && nasm == n_asm_req, $sformatf("grants %0d requests %0d", nasm, n_asm_req));
    check(n_overlap > 0, $sformatf("pipelined tokens %0d", n_overlap));
    check(nffn > 10 && nffn >= nctx - 1, $sformatf("FFN passes %0d contexts %0d", nffn, nctx));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
