// tolerance_updater -- tolerance range (TR) of each channel's current HQE level.
//
// A level quantizes the interval [rmin, rmax] with scale s. Values up to half a
// quantization step outside that interval still round onto a valid code, so
// the TR of the level is [rmin - s/2, rmax + s/2] (s/2 taken in whole int8
// units, s is UQ8.8, hence s >> 9). The paper states that the TR is computed
// from rmax, rmin and s0; the half-step margin is this design's choice.
// Combinational, LANES channels at a time.
module tolerance_updater
  import titanus_pkg::*;
#(
  parameter int unsigned LANES = titanus_pkg::PAR
) (
  input  tr_t  [LANES-1:0]       rmin,
  input  tr_t  [LANES-1:0]       rmax,
  input  logic [LANES-1:0][15:0] scale,
  output tr_t  [LANES-1:0]       tr_lo,
  output tr_t  [LANES-1:0]       tr_hi
);
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      tr_lo[i] = rmin[i] - tr_t'(scale[i] >> (FRAC + 1));
      tr_hi[i] = rmax[i] + tr_t'(scale[i] >> (FRAC + 1));
    end
  end
endmodule
