// lane_quantizer -- quantizes the non-zero elements of one channel group.
//
// For every lane whose index bit is set, code q = clamp(round(x / s) + z, 0,
// 2^bits - 1), with s in UQ8.8. Lanes with index 0 (pruned) are not quantized.
// The label bit marks the lanes whose code is non-zero, and only those codes
// are packed to the low lanes of q_nz (count in cnt): this is the part of the
// KV cache that is transferred off chip. Combinational.
module lane_quantizer
  import titanus_pkg::*;
#(
  parameter int unsigned LANES = titanus_pkg::PAR,
  localparam int unsigned CW   = $clog2(LANES + 1)
) (
  input  logic [3:0]             bits,
  input  logic [LANES-1:0]       idx,
  input  i8_t  [LANES-1:0]       x,
  input  logic [LANES-1:0][15:0] scale,
  input  logic [LANES-1:0][7:0]  zp,
  output logic [LANES-1:0][7:0]  q,
  output logic [LANES-1:0]       label,
  output logic [LANES-1:0][7:0]  q_nz,
  output logic [CW-1:0]          cnt
);
  always_comb begin
    q_nz = '0;
    cnt  = '0;
    for (int i = 0; i < LANES; i++) begin
      q[i]     = idx[i] ? quantize(x[i], scale[i], zp[i], bits) : 8'd0;
      label[i] = idx[i] && (q[i] != 0);
      if (label[i]) begin
        q_nz[cnt] = q[i];
        cnt = cnt + 1'b1;
      end
    end
  end
endmodule
