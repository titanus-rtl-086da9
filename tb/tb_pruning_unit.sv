// tb_pruning_unit -- self-checking test of the pruning unit.
//
// Writes per-layer thresholds, sends random tokens (with elements placed
// exactly at +-threshold) of a full and of a partial length, and checks every
// output group against a reference model: pruned values, masks, packed
// non-zero data and counts, the enabled units on the last group, and that a
// token of L channels takes ceil(L/LANES) output cycles.
module tb_pruning_unit;
  import titanus_pkg::*;
  localparam int D = 40, LANES = 16, LAYERS = 12, G = (D + LANES - 1) / LANES;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we, cfg_is_v, in_valid, in_ready;
  logic [3:0] cfg_layer, in_layer;
  logic [7:0] cfg_th;
  logic [$clog2(D+1)-1:0] in_len;
  i8_t [D-1:0] in_k, in_v;
  logic out_valid, out_last;
  logic [$clog2(G+1)-1:0] out_group;
  logic [LANES-1:0] out_lanes, out_mask_k, out_mask_v;
  i8_t [LANES-1:0] out_k, out_v, out_nz_k, out_nz_v;
  logic [$clog2(LANES+1)-1:0] out_cnt_k, out_cnt_v;

  pruning_unit #(.D(D), .LANES(LANES), .LAYERS(LAYERS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] thk [LAYERS], thv [LAYERS];

  function automatic i8_t ref_prune(i8_t x, logic [7:0] th);
    int m;
    m = (x < 0) ? -int'(x) : int'(x);
    return (m >= int'(th)) ? x : 8'sd0;
  endfunction

  task automatic run_token(input int layer, input int len);
    i8_t [D-1:0] k, v;
    int ngrp, got, t0, tlast;
    for (int i = 0; i < D; i++) begin
      k[i] = i8_t'($urandom_range(0, 255));
      v[i] = i8_t'($urandom_range(0, 255));
      if (i % 7 == 0) k[i] = i8_t'(thk[layer]);
      if (i % 7 == 1) k[i] = -i8_t'(thk[layer]);
      if (i % 7 == 2) k[i] = i8_t'(thk[layer] - 1);
      if (i % 5 == 0) v[i] = i8_t'(thv[layer]);
      if (i % 5 == 1) v[i] = -i8_t'(thv[layer] - 1);
      if (i % 11 == 3) v[i] = 0;
    end
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    in_valid = 1; in_layer = 4'(layer); in_len = 6'(len); in_k = k; in_v = v;
    @(posedge clk); t0 = $time / 10;
    @(negedge clk); in_valid = 0;
    ngrp = (len + LANES - 1) / LANES;
    got = 0;
    while (got < ngrp) begin
      @(posedge clk); #1;
      if (out_valid) begin
        int g, nk, nv;
        i8_t ek, ev;
        g = got;
        check(int'(out_group) == g, "group index");
        check(out_last == (g == ngrp - 1), "last flag");
        nk = 0; nv = 0;
        for (int i = 0; i < LANES; i++) begin
          int c;
          c = g * LANES + i;
          check(out_lanes[i] == (c < len), $sformatf("lane enable g%0d l%0d", g, i));
          ek = (c < len) ? ref_prune(k[c], thk[layer]) : 8'sd0;
          ev = (c < len) ? ref_prune(v[c], thv[layer]) : 8'sd0;
          check(out_k[i] == ek && out_v[i] == ev, $sformatf("pruned value c%0d", c));
          check(out_mask_k[i] == (ek != 0) && out_mask_v[i] == (ev != 0), "mask");
          if (ek != 0) begin check(out_nz_k[nk] == ek, "nz k"); nk++; end
          if (ev != 0) begin check(out_nz_v[nv] == ev, "nz v"); nv++; end
        end
        check(int'(out_cnt_k) == nk && int'(out_cnt_v) == nv, "nz counts");
        got++;
        tlast = $time / 10;
      end
    end
    // groups leave on consecutive cycles, the first one cycle after acceptance + 1
    check(tlast - t0 == ngrp, $sformatf("latency %0d vs %0d", tlast - t0, ngrp));
  endtask

  initial begin
    cfg_we = 0; cfg_is_v = 0; cfg_layer = 0; cfg_th = 0; in_valid = 0;
    in_layer = 0; in_len = 0; in_k = '0; in_v = '0;
    for (int l = 0; l < LAYERS; l++) begin
      thk[l] = 8'($urandom_range(1, 40));
      thv[l] = 8'($urandom_range(1, 40));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < LAYERS; l++) begin
      @(negedge clk); cfg_we = 1; cfg_is_v = 0; cfg_layer = 4'(l); cfg_th = thk[l];
      @(negedge clk); cfg_we = 1; cfg_is_v = 1; cfg_layer = 4'(l); cfg_th = thv[l];
    end
    @(negedge clk); cfg_we = 0;
    for (int r = 0; r < 12; r++) begin
      run_token(r % LAYERS, D);
      run_token((r * 5) % LAYERS, 1 + (r * 7) % D);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
