// quantization_unit -- cascade quantization of the pruned KV cache with HQE.
//
// Input is the pruning unit's output: per cycle one group of LANES Key and
// LANES Value channels of one token, each as an index bit map plus the packed
// non-zero values. Output is the compressed KV cache that goes off chip: per
// group the index, the label (lanes whose code is non-zero) and the packed
// non-zero codes, for Key and Value side by side. Scale factors, zero points
// and level start tokens go to the SZ buffer.
//
// Sub-blocks, as named in the paper:
//   quant buffer  -- holds the index and non-zero data of every prefill token;
//   quant config  -- quantization bit-width of Key and of Value for each layer;
//   MMF           -- max_min_finder, per-channel range of the prefill data;
//   NZQ           -- nz_quantizer for K and for V, level-0 parameters and
//                    prefill quantization; its tolerance updater sets the TR;
//   CM            -- channel_monitor for K and for V, decode-stage range check,
//                    HierQuant level extension and quantization;
//   scheduler     -- qu_scheduler, the four-state FSM (idle, prefill, quant,
//                    decode).
// Prefill tokens cannot be quantized until the whole prefill is seen, so they
// leave the unit only in the QUANT state, after prefill_end. Decode tokens
// are quantized in the cycle they arrive and leave one cycle later.
//
// Design choices: the bit-width table resets to 3-bit Key and 2-bit Value
// (the paper's search settles on 3-bit Key and mostly 2-bit Value); tokens
// are numbered from 0 at start_seq; in_ready is low during QUANT and the
// cycle after it, the only time the unit cannot take data; prefill tokens
// beyond MAXP are dropped.
//
// Timing: QUANT takes G + n_prefill * G cycles (one group per cycle, plus one
// cycle of buffer read latency); a decode group leaves one cycle after it
// enters.
module quantization_unit
  import titanus_pkg::*;
#(
  parameter int unsigned D      = titanus_pkg::D_MODEL,
  parameter int unsigned LANES  = titanus_pkg::PAR,
  parameter int unsigned LAYERS = titanus_pkg::N_LAYERS,
  parameter int unsigned MAXP   = titanus_pkg::MAX_PREFILL,
  parameter int unsigned LEVELS = titanus_pkg::MAX_LEVELS,
  localparam int unsigned G     = (D + LANES - 1) / LANES,
  localparam int unsigned GW    = $clog2(G + 1),
  localparam int unsigned PW    = $clog2(MAXP + 1),
  localparam int unsigned LW    = $clog2(LAYERS),
  localparam int unsigned CW    = $clog2(LANES + 1),
  localparam int unsigned VW    = $clog2(LEVELS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // quantization configuration
  input  logic                 cfg_we,
  input  logic                 cfg_is_v,
  input  logic [LW-1:0]        cfg_layer,
  input  logic [3:0]           cfg_bits,
  input  logic [LW-1:0]        layer,
  // stage control
  input  logic                 start_seq,
  input  logic                 prefill_end,
  output qu_state_e            state,
  output logic                 quant_done,
  // pruned input, one group per cycle
  output logic                 in_ready,
  input  logic                 in_valid,
  input  logic [GW-1:0]        in_g,
  input  logic                 in_last,
  input  logic [LANES-1:0]     in_idx_k,
  input  i8_t  [LANES-1:0]     in_nz_k,
  input  logic [LANES-1:0]     in_idx_v,
  input  i8_t  [LANES-1:0]     in_nz_v,
  // compressed output
  output logic                 out_valid,
  output logic [TOK_W-1:0]     out_tok,
  output logic [GW-1:0]        out_g,
  output logic [LANES-1:0]     out_idx_k,
  output logic [LANES-1:0]     out_lbl_k,
  output logic [LANES-1:0][7:0] out_q_k,
  output logic [CW-1:0]        out_cnt_k,
  output logic [LANES-1:0]     out_idx_v,
  output logic [LANES-1:0]     out_lbl_v,
  output logic [LANES-1:0][7:0] out_q_v,
  output logic [CW-1:0]        out_cnt_v,
  // SZ buffer write port
  output logic                 sz_clear,
  output logic [GW-1:0]        sz_waddr,
  output logic [LANES-1:0]     sz_we_k,
  output logic [LANES-1:0][VW-1:0] sz_wlevel_k,
  output sz_entry_t [LANES-1:0] sz_wdata_k,
  output logic [LANES-1:0]     sz_we_v,
  output logic [LANES-1:0][VW-1:0] sz_wlevel_v,
  output sz_entry_t [LANES-1:0] sz_wdata_v,
  // events
  output logic                 ev_ext,      // a level was created this cycle
  output logic                 ev_sat       // an element clamped, no level left
);

  // ---------------- quantization configuration ----------------
  logic [3:0] bits_k [LAYERS];
  logic [3:0] bits_v [LAYERS];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < LAYERS; l++) begin
        bits_k[l] <= 4'd3;
        bits_v[l] <= 4'd2;
      end
    end else if (cfg_we) begin
      if (cfg_is_v) bits_v[cfg_layer] <= cfg_bits;
      else          bits_k[cfg_layer] <= cfg_bits;
    end
  end
  logic [3:0] bk, bv;
  assign bk = bits_k[layer];
  assign bv = bits_v[layer];

  // ---------------- scheduler ----------------
  logic            param_step, quant_step;
  logic [GW-1:0]   q_g;
  logic [PW-1:0]   q_t, n_tok;
  logic [TOK_W-1:0] tok;
  logic            qb_rvalid;

  qu_scheduler #(.G(G), .MAXP(MAXP)) u_sched (
    .clk, .rst_n, .start_seq, .prefill_end, .n_tok, .state, .clear(sz_clear),
    .param_step, .quant_step, .q_g, .q_t, .quant_done);

  assign in_ready = (state != QS_QUANT) && !qb_rvalid;

  logic acc_pre, acc_dec;
  assign acc_pre = in_valid && state == QS_PREFILL && !start_seq && n_tok < PW'(MAXP);
  assign acc_dec = in_valid && state == QS_DECODE  && !start_seq;

  // token counter
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_tok <= '0;
      tok   <= '0;
    end else if (start_seq) begin
      n_tok <= '0;
      tok   <= '0;
    end else if ((acc_pre || acc_dec) && in_last) begin
      tok <= tok + 1'b1;
      if (acc_pre) n_tok <= n_tok + 1'b1;
    end
  end

  // ---------------- quant buffer ----------------
  typedef struct packed {
    logic [LANES-1:0] idx_k;
    i8_t  [LANES-1:0] nz_k;
    logic [LANES-1:0] idx_v;
    i8_t  [LANES-1:0] nz_v;
  } qb_word_t;

  qb_word_t qbuf [MAXP*G];
  qb_word_t qb_rd;
  logic [GW-1:0] qb_rg;
  logic [PW-1:0] qb_rt;

  always_ff @(posedge clk) begin
    if (acc_pre)
      qbuf[32'(n_tok) * G + 32'(in_g)] <= '{idx_k: in_idx_k, nz_k: in_nz_k,
                                             idx_v: in_idx_v, nz_v: in_nz_v};
    if (quant_step)
      qb_rd <= qbuf[32'(q_t) * G + 32'(q_g)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qb_rvalid <= 1'b0;
      qb_rg     <= '0;
      qb_rt     <= '0;
    end else begin
      qb_rvalid <= quant_step;
      qb_rg     <= q_g;
      qb_rt     <= q_t;
    end
  end

  // ---------------- max-min finder ----------------
  i8_t [LANES-1:0] mx_k, mn_k, mx_v, mn_v;
  logic [GW-1:0]   mmf_rg;
  assign mmf_rg = param_step ? q_g : qb_rg;

  max_min_finder #(.D(D), .LANES(LANES)) u_mmf (
    .clk, .rst_n, .clear(sz_clear), .upd(acc_pre), .upd_g(in_g),
    .idx_k(in_idx_k), .nz_k(in_nz_k), .idx_v(in_idx_v), .nz_v(in_nz_v),
    .rd_g(mmf_rg), .max_k(mx_k), .min_k(mn_k), .max_v(mx_v), .min_v(mn_v));

  // ---------------- non-zero quantizers ----------------
  i8_t [LANES-1:0] qx_k, qx_v;
  nz_expand #(.LANES(LANES)) u_qxk (.map(qb_rd.idx_k), .packed_in(qb_rd.nz_k), .expanded(qx_k));
  nz_expand #(.LANES(LANES)) u_qxv (.map(qb_rd.idx_v), .packed_in(qb_rd.nz_v), .expanded(qx_v));

  logic [LANES-1:0][15:0] z_s_k, z_s_v;
  logic [LANES-1:0][7:0]  z_z_k, z_z_v, z_q_k, z_q_v;
  i8_t  [LANES-1:0]       z_b_k, z_b_v;
  tr_t  [LANES-1:0]       z_lo_k, z_hi_k, z_lo_v, z_hi_v;
  logic [LANES-1:0]       z_l_k, z_l_v;
  logic [CW-1:0]          z_c_k, z_c_v;

  nz_quantizer #(.LANES(LANES)) u_nzq_k (
    .bits(bk), .ch_max(mx_k), .ch_min(mn_k), .scale(z_s_k), .zp(z_z_k), .base(z_b_k),
    .tr_lo(z_lo_k), .tr_hi(z_hi_k), .idx(qb_rd.idx_k), .x(qx_k),
    .label(z_l_k), .q_nz(z_q_k), .cnt(z_c_k));
  nz_quantizer #(.LANES(LANES)) u_nzq_v (
    .bits(bv), .ch_max(mx_v), .ch_min(mn_v), .scale(z_s_v), .zp(z_z_v), .base(z_b_v),
    .tr_lo(z_lo_v), .tr_hi(z_hi_v), .idx(qb_rd.idx_v), .x(qx_v),
    .label(z_l_v), .q_nz(z_q_v), .cnt(z_c_v));

  // ---------------- per-channel level state ----------------
  logic [LANES-1:0][VW-1:0] lev_k [G], lev_v [G];
  logic [LANES-1:0][15:0]   sc_k  [G], sc_v  [G];
  logic [LANES-1:0][7:0]    zp_k  [G], zp_v  [G];
  tr_t  [LANES-1:0]         lo_k  [G], lo_v  [G];
  tr_t  [LANES-1:0]         hi_k  [G], hi_v  [G];

  // ---------------- channel monitors ----------------
  i8_t [LANES-1:0] dx_k, dx_v;
  nz_expand #(.LANES(LANES)) u_dxk (.map(in_idx_k), .packed_in(in_nz_k), .expanded(dx_k));
  nz_expand #(.LANES(LANES)) u_dxv (.map(in_idx_v), .packed_in(in_nz_v), .expanded(dx_v));

  logic [LANES-1:0]         c_ext_k, c_ext_v, c_sat_k, c_sat_v, c_l_k, c_l_v;
  logic [LANES-1:0][VW-1:0] c_lev_k, c_lev_v;
  logic [LANES-1:0][15:0]   c_s_k, c_s_v;
  logic [LANES-1:0][7:0]    c_z_k, c_z_v, c_q_k, c_q_v;
  tr_t  [LANES-1:0]         c_lo_k, c_hi_k, c_lo_v, c_hi_v;
  sz_entry_t [LANES-1:0]    c_e_k, c_e_v;
  logic [CW-1:0]            c_c_k, c_c_v;

  channel_monitor #(.LANES(LANES), .LEVELS(LEVELS)) u_cm_k (
    .bits(bk), .tok, .idx(in_idx_k), .x(dx_k),
    .cur_lev(lev_k[in_g]), .cur_scale(sc_k[in_g]), .cur_zp(zp_k[in_g]),
    .cur_lo(lo_k[in_g]), .cur_hi(hi_k[in_g]),
    .ext(c_ext_k), .sat(c_sat_k), .nxt_lev(c_lev_k), .nxt_scale(c_s_k), .nxt_zp(c_z_k),
    .nxt_lo(c_lo_k), .nxt_hi(c_hi_k), .sz_entry(c_e_k),
    .label(c_l_k), .q_nz(c_q_k), .cnt(c_c_k));
  channel_monitor #(.LANES(LANES), .LEVELS(LEVELS)) u_cm_v (
    .bits(bv), .tok, .idx(in_idx_v), .x(dx_v),
    .cur_lev(lev_v[in_g]), .cur_scale(sc_v[in_g]), .cur_zp(zp_v[in_g]),
    .cur_lo(lo_v[in_g]), .cur_hi(hi_v[in_g]),
    .ext(c_ext_v), .sat(c_sat_v), .nxt_lev(c_lev_v), .nxt_scale(c_s_v), .nxt_zp(c_z_v),
    .nxt_lo(c_lo_v), .nxt_hi(c_hi_v), .sz_entry(c_e_v),
    .label(c_l_v), .q_nz(c_q_v), .cnt(c_c_v));

  always_ff @(posedge clk) begin
    if (param_step) begin
      lev_k[q_g] <= '0;  lev_v[q_g] <= '0;
      sc_k[q_g]  <= z_s_k;  sc_v[q_g] <= z_s_v;
      zp_k[q_g]  <= z_z_k;  zp_v[q_g] <= z_z_v;
      lo_k[q_g]  <= z_lo_k; lo_v[q_g] <= z_lo_v;
      hi_k[q_g]  <= z_hi_k; hi_v[q_g] <= z_hi_v;
    end else if (acc_dec) begin
      lev_k[in_g] <= c_lev_k; lev_v[in_g] <= c_lev_v;
      sc_k[in_g]  <= c_s_k;   sc_v[in_g]  <= c_s_v;
      zp_k[in_g]  <= c_z_k;   zp_v[in_g]  <= c_z_v;
      lo_k[in_g]  <= c_lo_k;  lo_v[in_g]  <= c_lo_v;
      hi_k[in_g]  <= c_hi_k;  hi_v[in_g]  <= c_hi_v;
    end
  end

  // ---------------- SZ buffer writes ----------------
  always_comb begin
    sz_waddr = param_step ? q_g : in_g;
    for (int i = 0; i < LANES; i++) begin
      if (param_step) begin
        sz_we_k[i]     = 1'b1;
        sz_we_v[i]     = 1'b1;
        sz_wlevel_k[i] = '0;
        sz_wlevel_v[i] = '0;
        sz_wdata_k[i]  = '{scale: z_s_k[i], zp: z_z_k[i], base: z_b_k[i], start: '0};
        sz_wdata_v[i]  = '{scale: z_s_v[i], zp: z_z_v[i], base: z_b_v[i], start: '0};
      end else begin
        sz_we_k[i]     = acc_dec && c_ext_k[i];
        sz_we_v[i]     = acc_dec && c_ext_v[i];
        sz_wlevel_k[i] = c_lev_k[i];
        sz_wlevel_v[i] = c_lev_v[i];
        sz_wdata_k[i]  = c_e_k[i];
        sz_wdata_v[i]  = c_e_v[i];
      end
    end
  end

  assign ev_ext = acc_dec && (|c_ext_k || |c_ext_v);
  assign ev_sat = acc_dec && (|c_sat_k || |c_sat_v);

  // ---------------- output register ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tok   <= '0;
      out_g     <= '0;
      out_idx_k <= '0; out_lbl_k <= '0; out_q_k <= '0; out_cnt_k <= '0;
      out_idx_v <= '0; out_lbl_v <= '0; out_q_v <= '0; out_cnt_v <= '0;
    end else if (qb_rvalid) begin
      out_valid <= 1'b1;
      out_tok   <= TOK_W'(qb_rt);
      out_g     <= qb_rg;
      out_idx_k <= qb_rd.idx_k; out_lbl_k <= z_l_k; out_q_k <= z_q_k; out_cnt_k <= z_c_k;
      out_idx_v <= qb_rd.idx_v; out_lbl_v <= z_l_v; out_q_v <= z_q_v; out_cnt_v <= z_c_v;
    end else if (acc_dec) begin
      out_valid <= 1'b1;
      out_tok   <= tok;
      out_g     <= in_g;
      out_idx_k <= in_idx_k; out_lbl_k <= c_l_k; out_q_k <= c_q_k; out_cnt_k <= c_c_k;
      out_idx_v <= in_idx_v; out_lbl_v <= c_l_v; out_q_v <= c_q_v; out_cnt_v <= c_c_v;
    end else begin
      out_valid <= 1'b0;
    end
  end

  // No token may arrive while the unit is in QUANT.
  a_no_input_in_quant: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> in_ready);

endmodule
