// nz_quantizer -- prefill-stage non-zero quantizer (NZQ) for one channel group.
//
// From the per-channel max and min of the prefill data it derives the level-0
// parameters of every channel: scale s = (rmax - rmin) / (2^bits - 1) in UQ8.8
// (at least one LSB), zero point z = clamp(round(-rmin / s)), and base, the
// dequantized value of code 0, which the dequantizer uses without multiplying.
// A channel that saw no non-zero data (max < min after initialisation) gets
// the range [0, 0]. The tolerance updater turns (rmin, rmax, s) into the
// channel's tolerance range. It then quantizes the non-zero elements of one
// token group with these parameters (lane_quantizer). Combinational.
module nz_quantizer
  import titanus_pkg::*;
#(
  parameter int unsigned LANES = titanus_pkg::PAR,
  localparam int unsigned CW   = $clog2(LANES + 1)
) (
  input  logic [3:0]             bits,
  input  i8_t  [LANES-1:0]       ch_max,
  input  i8_t  [LANES-1:0]       ch_min,
  output logic [LANES-1:0][15:0] scale,
  output logic [LANES-1:0][7:0]  zp,
  output i8_t  [LANES-1:0]       base,
  output tr_t  [LANES-1:0]       tr_lo,
  output tr_t  [LANES-1:0]       tr_hi,
  input  logic [LANES-1:0]       idx,
  input  i8_t  [LANES-1:0]       x,
  output logic [LANES-1:0]       label,
  output logic [LANES-1:0][7:0]  q_nz,
  output logic [CW-1:0]          cnt
);
  tr_t [LANES-1:0] rmin, rmax;
  logic [LANES-1:0][7:0] q_unused;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      if (ch_max[i] < ch_min[i]) begin
        rmin[i] = '0;
        rmax[i] = '0;
      end else begin
        rmin[i] = tr_t'(ch_min[i]);
        rmax[i] = tr_t'(ch_max[i]);
      end
      scale[i] = calc_scale(rmin[i], rmax[i], bits);
      zp[i]    = calc_zp(rmin[i], scale[i], bits);
      base[i]  = dequant(8'd0, zp[i], scale[i]);
    end
  end

  tolerance_updater #(.LANES(LANES)) u_tu (
    .rmin(rmin), .rmax(rmax), .scale(scale), .tr_lo(tr_lo), .tr_hi(tr_hi));

  lane_quantizer #(.LANES(LANES)) u_q (
    .bits(bits), .idx(idx), .x(x), .scale(scale), .zp(zp),
    .q(q_unused), .label(label), .q_nz(q_nz), .cnt(cnt));
endmodule
