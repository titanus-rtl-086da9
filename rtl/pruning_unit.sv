// pruning_unit -- on-the-fly element-wise pruning of one token's Key and Value.
//
// An element is dropped (set to zero) when its magnitude is below the pruning
// threshold of its layer; Key and Value have separate thresholds and are pruned
// side by side by two comparator banks of PAR units each. The blocks follow the
// PU figure of the paper: a pruning configuration (threshold table for K and V
// of every layer), a pruning buffer holding the incoming token, the K and V
// comparators (compare, then a 2:1 mux choosing 0 or the data), a mask generator
// that marks the non-zero positions, and a non-zero extraction stage that packs
// the surviving elements to the low lanes. The controller walks the token in
// groups of PAR channels and, on the last group, enables only the units that
// still hold data ("based on the input data size").
//
// The drop rule follows the paper: an element is unimportant when its
// magnitude is below the threshold, so it is kept when |x| >= th. The
// organizer in each comparator gathers the unit outputs into one group.
// Design choices: thresholds are 8-bit unsigned and reset to 0 (no pruning); the token is
// loaded whole with a valid/ready handshake; one group leaves per cycle, one
// cycle after the group is read from the buffer.
//
// Interface
//   cfg_we/cfg_is_v/cfg_layer/cfg_th : write one threshold of the table.
//   in_valid/in_ready, in_layer, in_len, in_k, in_v : one token (in_len <= D channels).
//   out_valid, out_group, out_last, out_lanes : group index, last group, enabled units.
//   out_k/out_v       : pruned values in place;  out_mask_k/out_mask_v : non-zero map.
//   out_nz_k/out_nz_v : non-zero values packed to lane 0 upward, out_cnt_k/out_cnt_v : how many.
// Timing: a token of L channels takes ceil(L/PAR) cycles after acceptance,
// and the next token is accepted in the cycle after the last group.
module pruning_unit
  import titanus_pkg::*;
#(
  parameter int unsigned D        = titanus_pkg::D_MODEL,
  parameter int unsigned LANES    = titanus_pkg::PAR,
  parameter int unsigned LAYERS   = titanus_pkg::N_LAYERS,
  localparam int unsigned G       = (D + LANES - 1) / LANES,
  localparam int unsigned GW      = $clog2(G + 1),
  localparam int unsigned LW      = $clog2(LAYERS),
  localparam int unsigned CW      = $clog2(LANES + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cfg_we,
  input  logic                 cfg_is_v,
  input  logic [LW-1:0]        cfg_layer,
  input  logic [7:0]           cfg_th,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [LW-1:0]        in_layer,
  input  logic [$clog2(D+1)-1:0] in_len,
  input  i8_t [D-1:0]          in_k,
  input  i8_t [D-1:0]          in_v,
  output logic                 out_valid,
  output logic [GW-1:0]        out_group,
  output logic                 out_last,
  output logic [LANES-1:0]     out_lanes,
  output i8_t [LANES-1:0]      out_k,
  output i8_t [LANES-1:0]      out_v,
  output logic [LANES-1:0]     out_mask_k,
  output logic [LANES-1:0]     out_mask_v,
  output i8_t [LANES-1:0]      out_nz_k,
  output i8_t [LANES-1:0]      out_nz_v,
  output logic [CW-1:0]        out_cnt_k,
  output logic [CW-1:0]        out_cnt_v
);

  // Pruning configuration: [Th_k0, Th_k1, ..., Th_v0, Th_v1, ...]
  logic [7:0] th_k [LAYERS];
  logic [7:0] th_v [LAYERS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < LAYERS; l++) begin
        th_k[l] <= '0;
        th_v[l] <= '0;
      end
    end else if (cfg_we) begin
      if (cfg_is_v) th_v[cfg_layer] <= cfg_th;
      else          th_k[cfg_layer] <= cfg_th;
    end
  end

  // Pruning buffer and controller.
  i8_t [G*LANES-1:0] buf_k, buf_v;
  logic              busy;
  logic [GW-1:0]     grp, ngrp;
  logic [$clog2(D+1)-1:0] len_q;
  logic [7:0]        tk, tv;

  assign in_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      grp   <= '0;
      ngrp  <= '0;
      len_q <= '0;
      tk    <= '0;
      tv    <= '0;
      buf_k <= '0;
      buf_v <= '0;
    end else if (!busy) begin
      if (in_valid && in_len != 0) begin
        busy  <= 1'b1;
        grp   <= '0;
        ngrp  <= GW'((in_len + LANES - 1) / LANES);
        len_q <= in_len;
        tk    <= th_k[in_layer];
        tv    <= th_v[in_layer];
        buf_k <= '0;
        buf_v <= '0;
        buf_k[D-1:0] <= in_k;
        buf_v[D-1:0] <= in_v;
      end
    end else begin
      grp <= grp + 1'b1;
      if (grp == ngrp - 1'b1) busy <= 1'b0;
    end
  end

  // Unit enables: all units except on a partial last group.
  logic [LANES-1:0] lanes;
  always_comb begin
    for (int i = 0; i < LANES; i++)
      lanes[i] = (32'(grp) * LANES + i) < 32'(len_q);
  end

  // K and V comparators.
  function automatic logic keep(input i8_t x, input logic [7:0] th);
    logic [7:0] mag;
    mag = (x < 0) ? 8'(-x) : 8'(x);
    return mag >= th;
  endfunction

  i8_t [LANES-1:0]  pk, pv;
  logic [LANES-1:0] mk, mv;
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      i8_t xk, xv;
      xk = buf_k[32'(grp) * LANES + i];
      xv = buf_v[32'(grp) * LANES + i];
      pk[i] = (lanes[i] && keep(xk, tk)) ? xk : 8'sd0;
      pv[i] = (lanes[i] && keep(xv, tv)) ? xv : 8'sd0;
      // mask generator
      mk[i] = pk[i] != 0;
      mv[i] = pv[i] != 0;
    end
  end

  // Non-zero extraction: pack non-zero elements to the low lanes.
  i8_t [LANES-1:0]  nk, nv;
  logic [CW-1:0]    ck, cv;
  always_comb begin
    nk = '0;
    nv = '0;
    ck = '0;
    cv = '0;
    for (int i = 0; i < LANES; i++) begin
      if (mk[i]) begin nk[ck] = pk[i]; ck = ck + 1'b1; end
      if (mv[i]) begin nv[cv] = pv[i]; cv = cv + 1'b1; end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_group  <= '0;
      out_last   <= 1'b0;
      out_lanes  <= '0;
      out_k      <= '0;
      out_v      <= '0;
      out_mask_k <= '0;
      out_mask_v <= '0;
      out_nz_k   <= '0;
      out_nz_v   <= '0;
      out_cnt_k  <= '0;
      out_cnt_v  <= '0;
    end else begin
      out_valid  <= busy;
      out_group  <= grp;
      out_last   <= busy && (grp == ngrp - 1'b1);
      out_lanes  <= lanes;
      out_k      <= pk;
      out_v      <= pv;
      out_mask_k <= mk;
      out_mask_v <= mv;
      out_nz_k   <= nk;
      out_nz_v   <= nv;
      out_cnt_k  <= ck;
      out_cnt_v  <= cv;
    end
  end

endmodule
