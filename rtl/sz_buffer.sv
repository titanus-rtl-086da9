// sz_buffer -- scale-zero buffer: every HQE level of every K and V channel.
//
// Organised as LANES banks for Key and LANES banks for Value, one bank per lane
// of a channel group, so that the 16 Key and 16 Value channels of a group can
// each write their own level in the same cycle. A bank word holds all LEVELS
// entries (sz_entry_t: scale, zero point, base, start token) of one channel and
// is addressed by the channel group. Besides the entries the buffer keeps the
// number of valid levels of each channel (nlev), raised by each write and
// cleared by clear at the start of a sequence.
// With the defaults: 2 x 16 banks x 48 words x 8 levels x 42 bits = 64,512
// bytes, plus 768 bytes of level counts, inside the 64 KB the paper gives. The
// banking and the entry format are this design's choice.
// Timing: writes take effect at the clock edge; a read returns one cycle after
// its address (synchronous, as an SRAM macro would).
module sz_buffer
  import titanus_pkg::*;
#(
  parameter int unsigned D      = titanus_pkg::D_MODEL,
  parameter int unsigned LANES  = titanus_pkg::PAR,
  parameter int unsigned LEVELS = titanus_pkg::MAX_LEVELS,
  localparam int unsigned G     = (D + LANES - 1) / LANES,
  localparam int unsigned GW    = $clog2(G + 1),
  localparam int unsigned VW    = $clog2(LEVELS),
  localparam int unsigned NW    = $clog2(LEVELS + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic [GW-1:0]              waddr,
  input  logic [LANES-1:0]           we_k,
  input  logic [LANES-1:0][VW-1:0]   wlevel_k,
  input  sz_entry_t [LANES-1:0]      wdata_k,
  input  logic [LANES-1:0]           we_v,
  input  logic [LANES-1:0][VW-1:0]   wlevel_v,
  input  sz_entry_t [LANES-1:0]      wdata_v,
  input  logic                       re,
  input  logic                       rsel_v,
  input  logic [GW-1:0]              raddr,
  output sz_entry_t [LANES-1:0][LEVELS-1:0] rdata,
  output logic [LANES-1:0][NW-1:0]   rnlev
);
  sz_entry_t [LEVELS-1:0] mem_k [LANES][G];
  sz_entry_t [LEVELS-1:0] mem_v [LANES][G];
  logic [NW-1:0]          nlev_k [LANES][G];
  logic [NW-1:0]          nlev_v [LANES][G];

  for (genvar b = 0; b < LANES; b++) begin : g_bank
    always_ff @(posedge clk) begin
      if (we_k[b]) mem_k[b][waddr][wlevel_k[b]] <= wdata_k[b];
      if (we_v[b]) mem_v[b][waddr][wlevel_v[b]] <= wdata_v[b];
      if (re)      rdata[b] <= rsel_v ? mem_v[b][raddr] : mem_k[b][raddr];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int a = 0; a < G; a++) begin
          nlev_k[b][a] <= '0;
          nlev_v[b][a] <= '0;
        end
        rnlev[b] <= '0;
      end else begin
        if (clear) begin
          for (int a = 0; a < G; a++) begin
            nlev_k[b][a] <= '0;
            nlev_v[b][a] <= '0;
          end
        end else begin
          if (we_k[b] && NW'(wlevel_k[b]) + 1'b1 > nlev_k[b][waddr])
            nlev_k[b][waddr] <= NW'(wlevel_k[b]) + 1'b1;
          if (we_v[b] && NW'(wlevel_v[b]) + 1'b1 > nlev_v[b][waddr])
            nlev_v[b][waddr] <= NW'(wlevel_v[b]) + 1'b1;
        end
        if (re) rnlev[b] <= rsel_v ? nlev_v[b][raddr] : nlev_k[b][raddr];
      end
    end
  end
endmodule
