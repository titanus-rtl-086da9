// cim_block -- weight-stationary matrix-vector block (Q/K/V/Out/FC1/FC2 CIM).
//
// Holds one trainable matrix of the decoder layer, OUT rows of IN int8
// weights, and multiplies it by an int8 input vector: y[r] = sat8(round(
// sum_i W[r][i] * x[i] / 2^shift)). The weights are written once (w_we, one
// row per cycle) and then stay on chip, which is the point of the CIM design:
// static weights are never reloaded. In the paper the block is built from
// digital CIM macros and accumulators taken from earlier work; their internal
// bit-serial organisation is not given, so this block models the macro array
// behaviourally as a memory read one row per cycle plus an IN-wide MAC and the
// accumulator. The row-per-cycle rate and the shift-and-saturate
// requantization to int8 are this design's choices.
//
// Interface: start with x loads the input; done pulses when y holds all OUT
// outputs; busy is high in between. Timing: done comes OUT + 2 cycles after
// start (one row per cycle, one cycle of memory read latency, one output
// cycle).
module cim_block
  import titanus_pkg::*;
#(
  parameter int unsigned IN  = titanus_pkg::D_MODEL,
  parameter int unsigned OUT = titanus_pkg::D_MODEL,
  localparam int unsigned RW = $clog2(OUT + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              w_we,
  input  logic [RW-1:0]     w_row,
  input  i8_t  [IN-1:0]     w_data,
  input  logic [4:0]        shift,
  input  logic              start,
  input  i8_t  [IN-1:0]     x,
  output logic              busy,
  output logic              done,
  output i8_t  [OUT-1:0]    y
);
  i8_t [IN-1:0] wmem [OUT];
  i8_t [IN-1:0] xr, wrow;
  logic [RW-1:0] r, r_d;
  logic          rd_v;

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_row] <= w_data;
    if (busy) wrow <= wmem[r];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      r    <= '0;
      r_d  <= '0;
      rd_v <= 1'b0;
      xr   <= '0;
    end else begin
      rd_v <= busy;
      r_d  <= r;
      if (start && !busy) begin
        busy <= 1'b1;
        r    <= '0;
        xr   <= x;
      end else if (busy) begin
        if (r == RW'(OUT - 1)) busy <= 1'b0;
        r <= r + 1'b1;
      end
    end
  end

  // MAC over one row and requantization
  logic signed [31:0] dot;
  always_comb begin
    dot = '0;
    for (int i = 0; i < IN; i++) dot = dot + 32'(wrow[i] * xr[i]);
  end

  logic signed [31:0] scaled;
  assign scaled = (shift == 0) ? dot : ((dot + (32'sd1 <<< (shift - 1))) >>> shift);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y    <= '0;
      done <= 1'b0;
    end else begin
      done <= rd_v && (r_d == RW'(OUT - 1));
      if (rd_v) y[r_d] <= sat8(scaled);
    end
  end
endmodule
