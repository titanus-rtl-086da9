// titanus_pkg -- constants, types and arithmetic shared by the Titanus core.
//
// The core handles one OPT-125M decoder layer. The sizes below follow the
// Titanus-125M configuration: 16 lanes in the pruning, quantization and
// dequantization units, 4 VPUs per computing engine, 256 MACs per engine and
// cycle, a 64 KB scale-zero (SZ) buffer. The model sizes (768 hidden, 3072 FFN,
// 12 heads of 64) are the public OPT-125M shapes; 12 layers is the paper's count.
//
// Number formats (this design's choice, the paper gives none):
//   * activations and KV cache entries are signed int8;
//   * a scale factor is unsigned fixed point with 8 fraction bits (UQ8.8);
//   * a zero point is an unsigned code in [0, 2^bits-1];
//   * a tolerance range bound is a 10-bit signed integer in int8 units.
// Rounding is round-half-away-from-zero everywhere (div_round).
package titanus_pkg;

  localparam int unsigned D_MODEL    = 768;
  localparam int unsigned D_FF       = 3072;
  localparam int unsigned N_HEADS    = 12;
  localparam int unsigned HEAD_DIM   = 64;
  localparam int unsigned N_LAYERS   = 12;
  localparam int unsigned PAR        = 16;    // PU / QU / DQU parallelism
  localparam int unsigned CE_VPUS    = 4;
  localparam int unsigned CE_MUS     = 4;     // MUs per VPU (16 per CE)
  localparam int unsigned MU_LANES   = 16;    // multipliers per MU
  localparam int unsigned CE_CAP     = CE_VPUS * CE_MUS * MU_LANES;  // 256 MACs
  localparam int unsigned MAX_PREFILL= 128;
  localparam int unsigned MAX_LEVELS = 8;
  localparam int unsigned TOK_W      = 10;    // token index: context up to 1024
  localparam int unsigned FRAC       = 8;     // scale fraction bits

  typedef logic signed [7:0] i8_t;
  typedef logic signed [9:0] tr_t;            // tolerance-range bound / extended min,max

  // One HQE level of one channel, as held in the SZ buffer (42 bits).
  typedef struct packed {
    logic [15:0]      scale;   // UQ8.8
    logic [7:0]       zp;      // zero point code
    logic signed [7:0] base;   // dequantized value of code 0 (used when label==0)
    logic [TOK_W-1:0] start;   // first token quantized with this level
  } sz_entry_t;

  typedef enum logic [1:0] {QS_IDLE, QS_PREFILL, QS_QUANT, QS_DECODE} qu_state_e;

  // Signed division rounded half away from zero; den must be positive.
  function automatic logic signed [31:0] div_round(input logic signed [31:0] num,
                                                   input logic signed [31:0] den);
    logic signed [31:0] a;
    a = (num < 0) ? -num : num;
    a = (a + (den >>> 1)) / den;
    return (num < 0) ? -a : a;
  endfunction

  function automatic i8_t sat8(input logic signed [31:0] v);
    if (v > 127)  return 8'sd127;
    if (v < -128) return -8'sd128;
    return v[7:0];
  endfunction

  function automatic logic [7:0] qmax(input logic [3:0] bits);
    return 8'((9'd1 << bits) - 9'd1);
  endfunction

  // Scale of a level covering [rmin, rmax] with 2^bits codes; at least 1 LSB.
  function automatic logic [15:0] calc_scale(input tr_t rmin, input tr_t rmax,
                                             input logic [3:0] bits);
    logic signed [31:0] range, s;
    range = 32'(rmax) - 32'(rmin);
    if (range < 0) range = 0;
    s = div_round(range <<< FRAC, 32'(qmax(bits)));
    if (s < 1) s = 1;
    if (s > 65535) s = 65535;
    return s[15:0];
  endfunction

  function automatic logic [7:0] calc_zp(input tr_t rmin, input logic [15:0] scale,
                                         input logic [3:0] bits);
    logic signed [31:0] z;
    z = div_round(-(32'(rmin) <<< FRAC), 32'(scale));
    if (z < 0) z = 0;
    if (z > 32'(qmax(bits))) z = 32'(qmax(bits));
    return z[7:0];
  endfunction

  function automatic i8_t dequant(input logic [7:0] q, input logic [7:0] zp,
                                  input logic [15:0] scale);
    return sat8(div_round((32'(q) - 32'(zp)) * 32'(scale), 32'(1 << FRAC)));
  endfunction

  function automatic logic [7:0] quantize(input i8_t x, input logic [15:0] scale,
                                          input logic [7:0] zp, input logic [3:0] bits);
    logic signed [31:0] q;
    q = div_round(32'(x) <<< FRAC, 32'(scale)) + 32'(zp);
    if (q < 0) q = 0;
    if (q > 32'(qmax(bits))) q = 32'(qmax(bits));
    return q[7:0];
  endfunction

endpackage
