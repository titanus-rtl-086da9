// dequantization_unit -- rebuilds int8 KV cache from the compressed format.
//
// Input, one group of LANES channels of one token per cycle, is what the
// quantization unit sent off chip: the index (non-zero after pruning), the
// label (non-zero code after quantization) and the packed non-zero codes. For
// every channel the unit picks the HQE level that was current when the token
// was quantized -- the last level whose start token is not after this token --
// from the SZ buffer, and then, following the paper's three rules:
//   index == 0            -> 0 (pruned; nothing to dequantize);
//   label == 0 (code 0)   -> the level's stored base value, no subtract/multiply;
//   code == zero point    -> 0, no subtract/multiply;
//   otherwise             -> round((code - z) * s), saturated to int8.
// mul_cnt and skip_cnt give, per output group, how many lanes used the
// multiplier and how many index-1 lanes avoided it.
//
// Design choices: the SZ read port is owned by this unit; the level lookup by
// start token; base stored per level (so that code 0 needs no multiplier).
// Timing: fully pipelined, one group per cycle, output two cycles after input
// (one cycle SZ read, one cycle output register).
module dequantization_unit
  import titanus_pkg::*;
#(
  parameter int unsigned D      = titanus_pkg::D_MODEL,
  parameter int unsigned LANES  = titanus_pkg::PAR,
  parameter int unsigned LEVELS = titanus_pkg::MAX_LEVELS,
  localparam int unsigned G     = (D + LANES - 1) / LANES,
  localparam int unsigned GW    = $clog2(G + 1),
  localparam int unsigned CW    = $clog2(LANES + 1),
  localparam int unsigned NW    = $clog2(LEVELS + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic                  in_is_v,
  input  logic [TOK_W-1:0]      in_tok,
  input  logic [GW-1:0]         in_g,
  input  logic [LANES-1:0]      in_idx,
  input  logic [LANES-1:0]      in_lbl,
  input  logic [LANES-1:0][7:0] in_q,
  // SZ buffer read port
  output logic                  sz_re,
  output logic                  sz_rsel_v,
  output logic [GW-1:0]         sz_raddr,
  input  sz_entry_t [LANES-1:0][LEVELS-1:0] sz_rdata,
  input  logic [LANES-1:0][NW-1:0] sz_rnlev,
  // reconstructed output
  output logic                  out_valid,
  output logic                  out_is_v,
  output logic [TOK_W-1:0]      out_tok,
  output logic [GW-1:0]         out_g,
  output i8_t  [LANES-1:0]      out_x,
  output logic [CW-1:0]         mul_cnt,
  output logic [CW-1:0]         skip_cnt
);
  assign sz_re     = in_valid;
  assign sz_rsel_v = in_is_v;
  assign sz_raddr  = in_g;

  // stage 1: wait for the SZ word
  logic                  s1_valid, s1_is_v;
  logic [TOK_W-1:0]      s1_tok;
  logic [GW-1:0]         s1_g;
  logic [LANES-1:0]      s1_idx, s1_lbl;
  logic [LANES-1:0][7:0] s1_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_is_v  <= 1'b0;
      s1_tok   <= '0;
      s1_g     <= '0;
      s1_idx   <= '0;
      s1_lbl   <= '0;
      s1_q     <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_is_v  <= in_is_v;
      s1_tok   <= in_tok;
      s1_g     <= in_g;
      s1_idx   <= in_idx;
      s1_lbl   <= in_lbl;
      s1_q     <= in_q;
    end
  end

  // stage 2: unpack codes, select level, dequantize
  i8_t [LANES-1:0] codes_s;
  nz_expand #(.LANES(LANES)) u_ex (.map(s1_lbl), .packed_in(s1_q), .expanded(codes_s));

  i8_t  [LANES-1:0] x;
  logic [CW-1:0]    nmul, nskip;
  always_comb begin
    nmul  = '0;
    nskip = '0;
    for (int i = 0; i < LANES; i++) begin
      sz_entry_t e;
      logic [7:0] c;
      e = sz_rdata[i][0];
      for (int l = 1; l < LEVELS; l++)
        if (NW'(l) < sz_rnlev[i] && sz_rdata[i][l].start <= s1_tok) e = sz_rdata[i][l];
      c = 8'(codes_s[i]);
      if (!s1_idx[i]) begin
        x[i] = 8'sd0;
      end else if (!s1_lbl[i]) begin
        x[i] = e.base;
        nskip = nskip + 1'b1;
      end else if (c == e.zp) begin
        x[i] = 8'sd0;
        nskip = nskip + 1'b1;
      end else begin
        x[i] = dequant(c, e.zp, e.scale);
        nmul = nmul + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_is_v  <= 1'b0;
      out_tok   <= '0;
      out_g     <= '0;
      out_x     <= '0;
      mul_cnt   <= '0;
      skip_cnt  <= '0;
    end else begin
      out_valid <= s1_valid;
      out_is_v  <= s1_is_v;
      out_tok   <= s1_tok;
      out_g     <= s1_g;
      out_x     <= x;
      mul_cnt   <= s1_valid ? nmul : '0;
      skip_cnt  <= s1_valid ? nskip : '0;
    end
  end
endmodule
