// tb_max_min_finder -- self-checking test of the max-min finder.
//
// Streams random prefill tokens, given as index bit map plus packed non-zero
// data, into the finder and keeps a reference max/min per channel that only
// counts index-1 elements. Checks every channel after each token, the
// initial values -128/127, and that clear restores them.
module tb_max_min_finder;
  import titanus_pkg::*;
  localparam int D = 48, LANES = 16, G = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, upd;
  logic [1:0] upd_g, rd_g;
  logic [LANES-1:0] idx_k, idx_v;
  i8_t [LANES-1:0] nz_k, nz_v, max_k, min_k, max_v, min_v;

  max_min_finder #(.D(D), .LANES(LANES)) dut (.*);

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

  int rmx [2][D], rmn [2][D];

  task automatic ref_clear();
    for (int c = 0; c < D; c++) for (int k = 0; k < 2; k++) begin rmx[k][c] = -128; rmn[k][c] = 127; end
  endtask

  task automatic check_all(input string tag);
    for (int g = 0; g < G; g++) begin
      rd_g = 2'(g); #1;
      for (int i = 0; i < LANES; i++) begin
        check(int'(max_k[i]) == rmx[0][g*LANES+i] && int'(min_k[i]) == rmn[0][g*LANES+i],
              $sformatf("%s K ch%0d", tag, g*LANES+i));
        check(int'(max_v[i]) == rmx[1][g*LANES+i] && int'(min_v[i]) == rmn[1][g*LANES+i],
              $sformatf("%s V ch%0d", tag, g*LANES+i));
      end
    end
  endtask

  task automatic send_group(input int g, input int density);
    int nk, nv;
    nk = 0; nv = 0;
    nz_k = '0; nz_v = '0;
    for (int i = 0; i < LANES; i++) begin
      i8_t xk, xv;
      xk = i8_t'($urandom_range(0, 255)); if (xk == 0) xk = 1;
      xv = i8_t'($urandom_range(0, 255)); if (xv == 0) xv = -1;
      idx_k[i] = $urandom_range(0, 99) < density;
      idx_v[i] = $urandom_range(0, 99) < density;
      if (idx_k[i]) begin
        nz_k[nk] = xk; nk++;
        if (xk > rmx[0][g*LANES+i]) rmx[0][g*LANES+i] = xk;
        if (xk < rmn[0][g*LANES+i]) rmn[0][g*LANES+i] = xk;
      end
      if (idx_v[i]) begin
        nz_v[nv] = xv; nv++;
        if (xv > rmx[1][g*LANES+i]) rmx[1][g*LANES+i] = xv;
        if (xv < rmn[1][g*LANES+i]) rmn[1][g*LANES+i] = xv;
      end
    end
    // garbage beyond the packed count must be ignored
    for (int i = nk; i < LANES; i++) nz_k[i] = 8'sd127;
    for (int i = nv; i < LANES; i++) nz_v[i] = -8'sd128;
    upd = 1; upd_g = 2'(g);
    @(negedge clk);
    upd = 0;
  endtask

  initial begin
    clear = 0; upd = 0; upd_g = 0; rd_g = 0; idx_k = 0; idx_v = 0; nz_k = '0; nz_v = '0;
    ref_clear();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all("init");
    for (int seq = 0; seq < 3; seq++) begin
      for (int t = 0; t < 6; t++) begin
        for (int g = 0; g < G; g++) send_group(g, 20 + 15 * t);
        check_all($sformatf("seq%0d tok%0d", seq, t));
      end
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      ref_clear();
      check_all("after clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
