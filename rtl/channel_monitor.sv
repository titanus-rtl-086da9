// channel_monitor -- decode-stage range check and hierarchical quantization (CM).
//
// Each newly generated token is checked channel by channel against the
// tolerance range (TR) of the channel's current HQE level. An element inside
// the TR is quantized with the level's scale and zero point. An element outside
// it opens the next level (HierQuant): the range is extended to
// [min(tr_lo, x), max(tr_hi, x)], a new scale, zero point and base are derived
// from it exactly as in the prefill quantizer, the TR of the new level is
// recomputed, and the level is written to the SZ buffer with the current token
// as its start. The token that opens a level and all later tokens use it, so
// no earlier token is ever re-quantized. Pruned (index 0) elements are skipped.
//
// Design choices: the extension rule above (the paper says only that the TR is
// extended), and what happens when a channel already holds MAX_LEVELS levels:
// the element is then clamped into the last level (sat flags it).
// Combinational; the quantization unit registers the new state.
module channel_monitor
  import titanus_pkg::*;
#(
  parameter int unsigned LANES  = titanus_pkg::PAR,
  parameter int unsigned LEVELS = titanus_pkg::MAX_LEVELS,
  localparam int unsigned CW    = $clog2(LANES + 1),
  localparam int unsigned VW    = $clog2(LEVELS)
) (
  input  logic [3:0]             bits,
  input  logic [TOK_W-1:0]       tok,
  input  logic [LANES-1:0]       idx,
  input  i8_t  [LANES-1:0]       x,
  input  logic [LANES-1:0][VW-1:0] cur_lev,
  input  logic [LANES-1:0][15:0] cur_scale,
  input  logic [LANES-1:0][7:0]  cur_zp,
  input  tr_t  [LANES-1:0]       cur_lo,
  input  tr_t  [LANES-1:0]       cur_hi,
  output logic [LANES-1:0]       ext,
  output logic [LANES-1:0]       sat,
  output logic [LANES-1:0][VW-1:0] nxt_lev,
  output logic [LANES-1:0][15:0] nxt_scale,
  output logic [LANES-1:0][7:0]  nxt_zp,
  output tr_t  [LANES-1:0]       nxt_lo,
  output tr_t  [LANES-1:0]       nxt_hi,
  output sz_entry_t [LANES-1:0]  sz_entry,
  output logic [LANES-1:0]       label,
  output logic [LANES-1:0][7:0]  q_nz,
  output logic [CW-1:0]          cnt
);
  tr_t [LANES-1:0] ermin, ermax, elo, ehi;
  logic [LANES-1:0][15:0] escale;
  logic [LANES-1:0][7:0]  ezp;
  logic [LANES-1:0][7:0]  q_unused;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic oor;
      oor     = idx[i] && ((tr_t'(x[i]) < cur_lo[i]) || (tr_t'(x[i]) > cur_hi[i]));
      ext[i]  = oor && (32'(cur_lev[i]) < LEVELS - 1);
      sat[i]  = oor && !ext[i];
      ermin[i]  = (tr_t'(x[i]) < cur_lo[i]) ? tr_t'(x[i]) : cur_lo[i];
      ermax[i]  = (tr_t'(x[i]) > cur_hi[i]) ? tr_t'(x[i]) : cur_hi[i];
      escale[i] = calc_scale(ermin[i], ermax[i], bits);
      ezp[i]    = calc_zp(ermin[i], escale[i], bits);
    end
  end

  tolerance_updater #(.LANES(LANES)) u_tu (
    .rmin(ermin), .rmax(ermax), .scale(escale), .tr_lo(elo), .tr_hi(ehi));

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      nxt_lev[i]   = ext[i] ? cur_lev[i] + 1'b1 : cur_lev[i];
      nxt_scale[i] = ext[i] ? escale[i] : cur_scale[i];
      nxt_zp[i]    = ext[i] ? ezp[i]    : cur_zp[i];
      nxt_lo[i]    = ext[i] ? elo[i]    : cur_lo[i];
      nxt_hi[i]    = ext[i] ? ehi[i]    : cur_hi[i];
      sz_entry[i]  = '{scale: escale[i], zp: ezp[i],
                       base: dequant(8'd0, ezp[i], escale[i]), start: tok};
    end
  end

  lane_quantizer #(.LANES(LANES)) u_q (
    .bits(bits), .idx(idx), .x(x), .scale(nxt_scale), .zp(nxt_zp),
    .q(q_unused), .label(label), .q_nz(q_nz), .cnt(cnt));
endmodule
