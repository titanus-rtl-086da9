// tb_sz_buffer -- self-checking test of the scale-zero buffer.
//
// Random per-lane writes of Key and Value levels, checked through the
// one-cycle read port against a reference copy: every entry, the level
// counts, and that clear empties the counts.
module tb_sz_buffer;
  import titanus_pkg::*;
  localparam int D = 64, LANES = 16, LEVELS = 8, G = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, re, rsel_v;
  logic [2:0] waddr, raddr;
  logic [LANES-1:0] we_k, we_v;
  logic [LANES-1:0][2:0] wlevel_k, wlevel_v;
  sz_entry_t [LANES-1:0] wdata_k, wdata_v;
  sz_entry_t [LANES-1:0][LEVELS-1:0] rdata;
  logic [LANES-1:0][3:0] rnlev;

  sz_buffer #(.D(D), .LANES(LANES), .LEVELS(LEVELS)) dut (.*);

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

  sz_entry_t m [2][G][LANES][LEVELS];
  int nl [2][G][LANES];
  bit wr [2][G][LANES][LEVELS];

  function automatic sz_entry_t rnd_entry();
    sz_entry_t e;
    e.scale = 16'($urandom);
    e.zp = 8'($urandom);
    e.base = i8_t'($urandom);
    e.start = TOK_W'($urandom);
    return e;
  endfunction

  task automatic verify(input string tag);
    for (int kv = 0; kv < 2; kv++)
      for (int g = 0; g < G; g++) begin
        @(negedge clk); re = 1; rsel_v = kv[0]; raddr = 3'(g);
        @(negedge clk); re = 0;
        for (int b = 0; b < LANES; b++) begin
          check(int'(rnlev[b]) == nl[kv][g][b], $sformatf("%s nlev kv%0d g%0d b%0d", tag, kv, g, b));
          for (int l = 0; l < nl[kv][g][b]; l++)
            if (wr[kv][g][b][l]) check(rdata[b][l] == m[kv][g][b][l], $sformatf("%s entry kv%0d g%0d b%0d l%0d", tag, kv, g, b, l));
        end
      end
  endtask

  initial begin
    clear = 0; re = 0; rsel_v = 0; waddr = 0; raddr = 0; we_k = 0; we_v = 0;
    wlevel_k = '0; wlevel_v = '0; wdata_k = '0; wdata_v = '0;
    for (int kv = 0; kv < 2; kv++) for (int g = 0; g < G; g++) for (int b = 0; b < LANES; b++) begin
      nl[kv][g][b] = 0;
      for (int l = 0; l < LEVELS; l++) wr[kv][g][b][l] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    verify("reset");
    for (int rep = 0; rep < 2; rep++) begin
      for (int w = 0; w < 60; w++) begin
        int g;
        @(negedge clk);
        g = $urandom_range(0, G - 1);
        waddr = 3'(g);
        for (int b = 0; b < LANES; b++) begin
          int lk, lvv;
          lk = $urandom_range(0, LEVELS - 1);
          lvv = $urandom_range(0, LEVELS - 1);
          we_k[b] = $urandom_range(0, 1);
          we_v[b] = $urandom_range(0, 1);
          wlevel_k[b] = 3'(lk);
          wlevel_v[b] = 3'(lvv);
          wdata_k[b] = rnd_entry();
          wdata_v[b] = rnd_entry();
          if (we_k[b]) begin m[0][g][b][lk] = wdata_k[b]; wr[0][g][b][lk] = 1; if (lk + 1 > nl[0][g][b]) nl[0][g][b] = lk + 1; end
          if (we_v[b]) begin m[1][g][b][lvv] = wdata_v[b]; wr[1][g][b][lvv] = 1; if (lvv + 1 > nl[1][g][b]) nl[1][g][b] = lvv + 1; end
        end
      end
      @(negedge clk); we_k = 0; we_v = 0;
      verify($sformatf("rep%0d", rep));
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int kv = 0; kv < 2; kv++) for (int g = 0; g < G; g++) for (int b = 0; b < LANES; b++) begin
        nl[kv][g][b] = 0;
        for (int l = 0; l < LEVELS; l++) wr[kv][g][b][l] = 0;
      end
      verify("clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
