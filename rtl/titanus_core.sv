// titanus_core -- one Titanus core: an OPT decoder layer with on-the-fly KV
// cache pruning and quantization.
//
// The core keeps all six weight matrices of its layer in CIM blocks (Q, K, V,
// Out, FC1, FC2) and never keeps the KV cache: every new Key and Value leaves
// the chip in compressed form and comes back through the dequantizer when it
// is needed. Data flow per token:
//   tok_x -> Q/K/V CIM -> K,V -> pruning unit -> quantization unit -> kvo_*
//                       \-> Q, K -> computing engines -> diagonal score (sc_*)
//   kvi_* -> dequantization unit (SZ buffer) -> token assembler
//            K: scored against the current query on the computing engines;
//            V: handed out on vrec_* for the attention-weighted sum.
//   ctx -> Out CIM -> FC1 CIM -> FC2 CIM -> y (to the next core).
// There are N_HEADS computing engines, one per attention head, each taking
// the 64 elements of its head in one chunk. The scale-zero buffer sits
// between the quantization unit (writes) and the dequantization unit (reads).
//
// What the paper does not describe is left outside the core and appears as
// ports: off-chip memory (kvo_*/kvi_*), softmax, the score-times-V sum that
// forms ctx, layer normalization and the FFN activation. Configuration
// (thresholds, bit-widths, weights, requantization shifts) is written through
// ports. Stage control: start_seq opens a sequence, prefill_end closes its
// prefill; tokens before prefill_end are prefill tokens. kvo_* and kvi_*
// carry one group of PAR channels per cycle in the format index / label /
// packed non-zero codes.
// Timing: a token occupies the token path for about D + 2 (projection) plus
// D/PAR + 2 cycles (pruning); see the README for the whole pipeline.
module titanus_core
  import titanus_pkg::*;
#(
  parameter int unsigned D      = titanus_pkg::D_MODEL,
  parameter int unsigned DFF    = titanus_pkg::D_FF,
  parameter int unsigned HEADS  = titanus_pkg::N_HEADS,
  parameter int unsigned LANES  = titanus_pkg::PAR,
  parameter int unsigned LAYERS = titanus_pkg::N_LAYERS,
  parameter int unsigned MAXP   = titanus_pkg::MAX_PREFILL,
  parameter int unsigned LEVELS = titanus_pkg::MAX_LEVELS,
  localparam int unsigned HD    = D / HEADS,
  localparam int unsigned G     = (D + LANES - 1) / LANES,
  localparam int unsigned GW    = $clog2(G + 1),
  localparam int unsigned LW    = $clog2(LAYERS),
  localparam int unsigned CW    = $clog2(LANES + 1),
  localparam int unsigned RW    = $clog2(DFF + 1),
  localparam int unsigned CAP   = titanus_pkg::CE_CAP
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [LW-1:0]        layer,
  // configuration
  input  logic                 pcfg_we,
  input  logic                 pcfg_is_v,
  input  logic [LW-1:0]        pcfg_layer,
  input  logic [7:0]           pcfg_th,
  input  logic                 qcfg_we,
  input  logic                 qcfg_is_v,
  input  logic [LW-1:0]        qcfg_layer,
  input  logic [3:0]           qcfg_bits,
  input  logic [5:0][4:0]      cim_shift,   // Q, K, V, Out, FC1, FC2
  input  logic                 w_we,
  input  logic [2:0]           w_sel,       // 0 Q, 1 K, 2 V, 3 Out, 4 FC1, 5 FC2
  input  logic [RW-1:0]        w_row,
  input  i8_t  [DFF-1:0]       w_data,      // low D entries used except for FC2
  // stage control
  input  logic                 start_seq,
  input  logic                 prefill_end,
  output qu_state_e            qu_state,
  output logic                 idle,
  // token input
  input  logic                 tok_valid,
  output logic                 tok_ready,
  input  i8_t  [D-1:0]         tok_x,
  // compressed KV to off-chip memory
  output logic                 kvo_valid,
  output logic [TOK_W-1:0]     kvo_tok,
  output logic [GW-1:0]        kvo_g,
  output logic [LANES-1:0]     kvo_idx_k,
  output logic [LANES-1:0]     kvo_lbl_k,
  output logic [LANES-1:0][7:0] kvo_q_k,
  output logic [CW-1:0]        kvo_cnt_k,
  output logic [LANES-1:0]     kvo_idx_v,
  output logic [LANES-1:0]     kvo_lbl_v,
  output logic [LANES-1:0][7:0] kvo_q_v,
  output logic [CW-1:0]        kvo_cnt_v,
  // compressed KV from off-chip memory (all groups of one token in order)
  input  logic                 kvi_valid,
  output logic                 kvi_ready,
  input  logic                 kvi_is_v,
  input  logic [TOK_W-1:0]     kvi_tok,
  input  logic [GW-1:0]        kvi_g,
  input  logic [LANES-1:0]     kvi_idx,
  input  logic [LANES-1:0]     kvi_lbl,
  input  logic [LANES-1:0][7:0] kvi_q,
  // attention scores (per head) and reconstructed Values
  output logic                 sc_valid,
  output logic                 sc_diag,
  output logic [TOK_W-1:0]     sc_tok,
  output logic signed [HEADS-1:0][31:0] sc,
  output logic                 vrec_valid,
  output logic [TOK_W-1:0]     vrec_tok,
  output i8_t  [D-1:0]         vrec,
  // FFN path and hand-off to the next core
  input  logic                 ctx_valid,
  output logic                 ctx_ready,
  input  i8_t  [D-1:0]         ctx,
  output logic                 y_valid,
  output i8_t  [D-1:0]         y,
  // activity, for performance counters
  output logic                 ev_prune,    // an element was pruned
  output logic                 ev_level,    // an HQE level was created
  output logic                 ev_sat,      // an element clamped (no level left)
  output logic                 ev_dq_skip,  // the dequantizer skipped a multiply
  output logic                 ev_ce_skip   // an engine skipped a zero multiply
);
  // ---------------- controller ----------------
  logic qkv_start, q_done, k_done, v_done, pu_start, pu_last;
  logic ce_start, ce_sel_asm, ce_done, asm_req, asm_grant;
  logic out_start, out_done, fc1_start, fc1_done, fc2_start, fc2_done;
  logic pu_ready, qu_ready;
  logic sc_src_asm;                  // engines are working on an assembled K
  logic [5:0] cim_busy;

  top_controller u_ctrl (
    .clk, .rst_n, .tok_valid, .tok_ready, .pu_ready, .qu_ready, .qkv_start,
    .q_done, .k_done, .v_done, .pu_start, .pu_last,
    .q_busy(cim_busy[0]), .ce_start, .ce_sel_asm, .ce_done, .asm_req, .asm_grant, .idle,
    .ctx_valid, .ctx_ready, .out_start, .out_done, .fc1_start, .fc1_done,
    .fc2_start, .fc2_done, .y_valid);

  // token counter (index of the token in the token path)
  logic [TOK_W-1:0] tok_cnt, cur_tok;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tok_cnt <= '0;
      cur_tok <= '0;
    end else if (start_seq) begin
      tok_cnt <= '0;
    end else if (qkv_start) begin
      cur_tok <= tok_cnt;
      tok_cnt <= tok_cnt + 1'b1;
    end
  end

  // ---------------- CIM blocks ----------------
  i8_t [D-1:0]   q_y, k_y, v_y, o_y, f2_y;
  i8_t [DFF-1:0] f1_y;
  logic [5:0]    wsel;
  always_comb for (int b = 0; b < 6; b++) wsel[b] = w_we && (w_sel == 3'(b));

  cim_block #(.IN(D), .OUT(D)) u_q (
    .clk, .rst_n, .w_we(wsel[0]), .w_row($clog2(D+1)'(w_row)), .w_data(w_data[D-1:0]),
    .shift(cim_shift[0]), .start(qkv_start), .x(tok_x), .busy(cim_busy[0]), .done(q_done), .y(q_y));
  cim_block #(.IN(D), .OUT(D)) u_k (
    .clk, .rst_n, .w_we(wsel[1]), .w_row($clog2(D+1)'(w_row)), .w_data(w_data[D-1:0]),
    .shift(cim_shift[1]), .start(qkv_start), .x(tok_x), .busy(cim_busy[1]), .done(k_done), .y(k_y));
  cim_block #(.IN(D), .OUT(D)) u_v (
    .clk, .rst_n, .w_we(wsel[2]), .w_row($clog2(D+1)'(w_row)), .w_data(w_data[D-1:0]),
    .shift(cim_shift[2]), .start(qkv_start), .x(tok_x), .busy(cim_busy[2]), .done(v_done), .y(v_y));
  cim_block #(.IN(D), .OUT(D)) u_out (
    .clk, .rst_n, .w_we(wsel[3]), .w_row($clog2(D+1)'(w_row)), .w_data(w_data[D-1:0]),
    .shift(cim_shift[3]), .start(out_start), .x(ctx), .busy(cim_busy[3]), .done(out_done), .y(o_y));
  cim_block #(.IN(D), .OUT(DFF)) u_fc1 (
    .clk, .rst_n, .w_we(wsel[4]), .w_row(w_row), .w_data(w_data[D-1:0]),
    .shift(cim_shift[4]), .start(fc1_start), .x(o_y), .busy(cim_busy[4]), .done(fc1_done), .y(f1_y));
  cim_block #(.IN(DFF), .OUT(D)) u_fc2 (
    .clk, .rst_n, .w_we(wsel[5]), .w_row($clog2(D+1)'(w_row)), .w_data(w_data),
    .shift(cim_shift[5]), .start(fc2_start), .x(f1_y), .busy(cim_busy[5]), .done(fc2_done), .y(f2_y));
  assign y = f2_y;

  // ---------------- pruning unit ----------------
  logic             pu_ov, pu_olast;
  logic [GW-1:0]    pu_og;
  logic [LANES-1:0] pu_lanes, pu_mk, pu_mv;
  i8_t  [LANES-1:0] pu_k, pu_v, pu_nk, pu_nv;
  logic [CW-1:0]    pu_ck, pu_cv;

  pruning_unit #(.D(D), .LANES(LANES), .LAYERS(LAYERS)) u_pu (
    .clk, .rst_n, .cfg_we(pcfg_we), .cfg_is_v(pcfg_is_v), .cfg_layer(pcfg_layer), .cfg_th(pcfg_th),
    .in_valid(pu_start), .in_ready(pu_ready), .in_layer(layer), .in_len($clog2(D+1)'(D)),
    .in_k(k_y), .in_v(v_y),
    .out_valid(pu_ov), .out_group(pu_og), .out_last(pu_olast), .out_lanes(pu_lanes),
    .out_k(pu_k), .out_v(pu_v), .out_mask_k(pu_mk), .out_mask_v(pu_mv),
    .out_nz_k(pu_nk), .out_nz_v(pu_nv), .out_cnt_k(pu_ck), .out_cnt_v(pu_cv));
  assign pu_last  = pu_ov && pu_olast;
  assign ev_prune = pu_ov && ((pu_lanes & ~pu_mk) != 0 || (pu_lanes & ~pu_mv) != 0);

  // ---------------- quantization unit + SZ buffer ----------------
  logic                     sz_clear;
  logic [GW-1:0]            sz_waddr;
  logic [LANES-1:0]         sz_we_k, sz_we_v;
  logic [LANES-1:0][$clog2(LEVELS)-1:0] sz_wl_k, sz_wl_v;
  sz_entry_t [LANES-1:0]    sz_wd_k, sz_wd_v;
  logic                     quant_done;

  quantization_unit #(.D(D), .LANES(LANES), .LAYERS(LAYERS), .MAXP(MAXP), .LEVELS(LEVELS)) u_qu (
    .clk, .rst_n, .cfg_we(qcfg_we), .cfg_is_v(qcfg_is_v), .cfg_layer(qcfg_layer), .cfg_bits(qcfg_bits),
    .layer, .start_seq, .prefill_end, .state(qu_state), .quant_done,
    .in_ready(qu_ready), .in_valid(pu_ov), .in_g(pu_og), .in_last(pu_olast),
    .in_idx_k(pu_mk), .in_nz_k(pu_nk), .in_idx_v(pu_mv), .in_nz_v(pu_nv),
    .out_valid(kvo_valid), .out_tok(kvo_tok), .out_g(kvo_g),
    .out_idx_k(kvo_idx_k), .out_lbl_k(kvo_lbl_k), .out_q_k(kvo_q_k), .out_cnt_k(kvo_cnt_k),
    .out_idx_v(kvo_idx_v), .out_lbl_v(kvo_lbl_v), .out_q_v(kvo_q_v), .out_cnt_v(kvo_cnt_v),
    .sz_clear, .sz_waddr, .sz_we_k, .sz_wlevel_k(sz_wl_k), .sz_wdata_k(sz_wd_k),
    .sz_we_v, .sz_wlevel_v(sz_wl_v), .sz_wdata_v(sz_wd_v), .ev_ext(ev_level), .ev_sat);

  logic                  sz_re, sz_rsel_v;
  logic [GW-1:0]         sz_raddr;
  sz_entry_t [LANES-1:0][LEVELS-1:0] sz_rdata;
  logic [LANES-1:0][$clog2(LEVELS+1)-1:0] sz_rnlev;

  sz_buffer #(.D(D), .LANES(LANES), .LEVELS(LEVELS)) u_sz (
    .clk, .rst_n, .clear(sz_clear), .waddr(sz_waddr),
    .we_k(sz_we_k), .wlevel_k(sz_wl_k), .wdata_k(sz_wd_k),
    .we_v(sz_we_v), .wlevel_v(sz_wl_v), .wdata_v(sz_wd_v),
    .re(sz_re), .rsel_v(sz_rsel_v), .raddr(sz_raddr), .rdata(sz_rdata), .rnlev(sz_rnlev));

  // ---------------- dequantization unit and token assembler ----------------
  logic             dq_ov, dq_ois_v;
  logic [TOK_W-1:0] dq_otok;
  logic [GW-1:0]    dq_og;
  i8_t [LANES-1:0]  dq_ox;
  logic [CW-1:0]    dq_mul, dq_skip;
  logic             kvi_fire;

  assign kvi_fire = kvi_valid && kvi_ready;

  dequantization_unit #(.D(D), .LANES(LANES), .LEVELS(LEVELS)) u_dqu (
    .clk, .rst_n, .in_valid(kvi_fire), .in_is_v(kvi_is_v), .in_tok(kvi_tok), .in_g(kvi_g),
    .in_idx(kvi_idx), .in_lbl(kvi_lbl), .in_q(kvi_q),
    .sz_re, .sz_rsel_v, .sz_raddr, .sz_rdata, .sz_rnlev,
    .out_valid(dq_ov), .out_is_v(dq_ois_v), .out_tok(dq_otok), .out_g(dq_og), .out_x(dq_ox),
    .mul_cnt(dq_mul), .skip_cnt(dq_skip));
  assign ev_dq_skip = dq_ov && dq_skip != 0;

  // The assembler collects the G groups of one token. Input stops after the
  // G-th group and resumes once the assembled token has been used.
  i8_t [G*LANES-1:0] asm_buf;
  logic [GW-1:0]     in_cnt, out_cnt;
  logic              asm_lock, asm_full, asm_is_v;
  logic [TOK_W-1:0]  asm_tok;

  assign kvi_ready = !asm_lock;
  assign asm_req   = asm_full && !asm_is_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      asm_buf    <= '0;
      in_cnt     <= '0;
      out_cnt    <= '0;
      asm_lock   <= 1'b0;
      asm_full   <= 1'b0;
      asm_is_v   <= 1'b0;
      asm_tok    <= '0;
      vrec_valid <= 1'b0;
      vrec_tok   <= '0;
    end else begin
      vrec_valid <= 1'b0;
      if (kvi_fire) begin
        if (in_cnt == GW'(G - 1)) begin
          in_cnt   <= '0;
          asm_lock <= 1'b1;
        end else begin
          in_cnt <= in_cnt + 1'b1;
        end
      end
      if (dq_ov) begin
        asm_buf[32'(dq_og) * LANES +: LANES] <= dq_ox;
        asm_is_v <= dq_ois_v;
        asm_tok  <= dq_otok;
        if (out_cnt == GW'(G - 1)) begin
          out_cnt  <= '0;
          asm_full <= 1'b1;
        end else begin
          out_cnt <= out_cnt + 1'b1;
        end
      end
      if (asm_full && asm_is_v) begin       // Value: hand out
        vrec_valid <= 1'b1;
        vrec_tok   <= asm_tok;
        asm_full   <= 1'b0;
        asm_lock   <= 1'b0;
      end else if (asm_grant) begin         // Key: scoring has started
        asm_full <= 1'b0;
      end
      if (ce_done && sc_src_asm) asm_lock <= 1'b0;
    end
  end
  assign vrec = asm_buf[D-1:0];

  // ---------------- computing engines, one per head ----------------
  logic [TOK_W-1:0]  ce_tok;
  i8_t [D-1:0]       kin;
  logic [HEADS-1:0]  ce_in_ready, ce_dn;
  logic [HEADS-1:0][31:0] ce_skp;
  logic signed [HEADS-1:0][31:0] ce_res;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sc_src_asm <= 1'b0;
      ce_tok     <= '0;
    end else if (ce_start) begin
      sc_src_asm <= ce_sel_asm;
      ce_tok     <= ce_sel_asm ? asm_tok : cur_tok;
    end
  end

  assign kin = sc_src_asm ? asm_buf[D-1:0] : k_y;

  for (genvar h = 0; h < HEADS; h++) begin : g_ce
    i8_t [CAP-1:0] a, b;
    logic [1:0]    cid;
    logic [31:0]   mt;
    logic [15:0]   me;
    always_comb begin
      a = '0;
      b = '0;
      a[HD-1:0] = q_y[h*HD +: HD];
      b[HD-1:0] = kin[h*HD +: HD];
    end
    computing_engine u_ce (
      .clk, .rst_n, .start(ce_start), .len(16'(HD)), .in_ready(ce_in_ready[h]),
      .in_valid(ce_in_ready[h]), .in_a(a), .in_b(b), .done(ce_dn[h]), .result(ce_res[h]),
      .case_id(cid), .mul_total(mt), .skip_total(ce_skp[h]), .mu_en_seen(me));
  end

  assign ce_done    = ce_dn[0];
  assign sc_valid   = ce_done;
  assign sc_diag    = !sc_src_asm;
  assign sc_tok     = ce_tok;
  assign sc         = ce_res;
  always_comb begin
    ev_ce_skip = 1'b0;
    for (int h = 0; h < HEADS; h++) if (ce_dn[h] && ce_skp[h] != 0) ev_ce_skip = 1'b1;
  end

  // The Q, K and V outputs must stay unchanged while the engines read them.
  a_qk_stable: assert property (@(posedge clk) disable iff (!rst_n)
    ce_start |-> !cim_busy[0]);
endmodule
