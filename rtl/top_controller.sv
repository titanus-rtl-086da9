// top_controller -- sequencing of one Titanus core.
//
// Three activities share the core, and this controller orders them:
//   token path  -- a token enters, the Q, K and V CIM blocks project it in
//                  parallel, then the pruning unit streams its K and V into the
//                  quantization unit while the computing engines produce the
//                  token's diagonal score q_t . k_t. The paper's top controller
//                  starts the score computation as soon as Q, K and V of one
//                  token are done, so the diagonal of the score matrix comes
//                  first; the diagonal uses the fresh K and bypasses the
//                  compression path.
//   score path  -- reconstructed Key tokens from the dequantization unit are
//                  scored against the current query on the computing engines.
//                  The diagonal has priority over it for the engines, and it
//                  waits while the query is being recomputed.
//   FFN path    -- an attention context vector runs through the Out, FC1 and
//                  FC2 CIM blocks in turn; the result is handed to the next
//                  core one token at a time (inter-core parallelism).
// The token path is a two-stage pipeline (the paper pipelines prefill tokens
// inside a core; its stage split is this design's choice): stage 1 is the
// Q/K/V projection, stage 2 the pruning and the diagonal score. The next
// token is accepted once the diagonal score of the current one is done, while
// the pruning unit may still be streaming; the pruning unit copies K and V
// into its own buffer when it starts, so the projection can overwrite them.
// Encodings and the priority rule are this design's choice.
// Timing: a token is accepted when the engines are free, the quantization
// unit can take data and no diagonal score is pending; pu_start waits for all
// three projections and for the pruning unit to be free.
module top_controller (
  input  logic clk,
  input  logic rst_n,
  // token path
  input  logic tok_valid,
  output logic tok_ready,
  input  logic pu_ready,
  input  logic qu_ready,
  output logic qkv_start,
  input  logic q_done,
  input  logic k_done,
  input  logic v_done,
  output logic pu_start,
  input  logic pu_last,        // last group of the token leaves the PU
  // computing engines
  input  logic q_busy,         // the query is being recomputed
  output logic ce_start,
  output logic ce_sel_asm,     // 0: diagonal (fresh K), 1: reconstructed K
  input  logic ce_done,
  input  logic asm_req,        // a reconstructed K token waits for scoring
  output logic asm_grant,      // its scoring starts this cycle
  output logic idle,          // no token, score or FFN pass in flight
  // FFN path
  input  logic ctx_valid,
  output logic ctx_ready,
  output logic out_start,
  input  logic out_done,
  output logic fc1_start,
  input  logic fc1_done,
  output logic fc2_start,
  input  logic fc2_done,
  output logic y_valid
);
  typedef enum logic [1:0] {T_IDLE, T_PROJ, T_COMP} tstate_e;
  typedef enum logic [1:0] {C_FREE, C_DIAG, C_ASM} cstate_e;
  typedef enum logic [1:0] {F_IDLE, F_OUT, F_FC1, F_FC2} fstate_e;

  tstate_e ts;
  cstate_e cs;
  fstate_e fs;
  logic qd, kd, vd;        // projection done flags
  logic diag_pend, pu_run;

  logic diag_go, asm_go;
  assign diag_go   = (cs == C_FREE) && diag_pend;
  assign asm_go    = (cs == C_FREE) && !diag_pend && asm_req && !q_busy;
  assign ce_start  = diag_go || asm_go;
  assign ce_sel_asm= asm_go || (cs == C_ASM);
  assign asm_grant = asm_go;

  assign tok_ready = (cs == C_FREE) && qu_ready && !diag_pend &&
                     (ts == T_IDLE || ts == T_COMP);
  assign qkv_start = tok_valid && tok_ready;
  assign pu_start  = (ts == T_PROJ) && pu_ready &&
                     (qd || q_done) && (kd || k_done) && (vd || v_done);
  assign idle      = (ts == T_IDLE) && (cs == C_FREE) && (fs == F_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts <= T_IDLE;
      cs <= C_FREE;
      qd <= 1'b0;
      kd <= 1'b0;
      vd <= 1'b0;
      diag_pend <= 1'b0;
      pu_run    <= 1'b0;
    end else begin
      // token path
      unique case (ts)
        T_IDLE: if (qkv_start) begin
          ts <= T_PROJ;
          qd <= 1'b0;
          kd <= 1'b0;
          vd <= 1'b0;
        end
        T_PROJ: begin
          if (q_done) qd <= 1'b1;
          if (k_done) kd <= 1'b1;
          if (v_done) vd <= 1'b1;
          if (pu_start) begin
            ts        <= T_COMP;
            diag_pend <= 1'b1;
          end
        end
        T_COMP: begin
          if (qkv_start) begin                  // next token enters stage 1
            ts <= T_PROJ;
            qd <= 1'b0;
            kd <= 1'b0;
            vd <= 1'b0;
          end else if (!pu_run && !diag_pend && cs != C_DIAG) begin
            ts <= T_IDLE;
          end
        end
        default: ts <= T_IDLE;
      endcase
      // pruning of the token in stage 2 (a new start wins over the old end)
      if (pu_last)  pu_run <= 1'b0;
      if (pu_start) pu_run <= 1'b1;
      // engines
      unique case (cs)
        C_FREE: if (diag_go) begin
          cs        <= C_DIAG;
          diag_pend <= 1'b0;
        end else if (asm_go) begin
          cs <= C_ASM;
        end
        C_DIAG, C_ASM: if (ce_done) cs <= C_FREE;
        default: cs <= C_FREE;
      endcase
    end
  end

  // FFN path
  assign ctx_ready = (fs == F_IDLE);
  assign out_start = ctx_valid && ctx_ready;
  assign fc1_start = (fs == F_OUT) && out_done;
  assign fc2_start = (fs == F_FC1) && fc1_done;
  assign y_valid   = (fs == F_FC2) && fc2_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fs <= F_IDLE;
    end else begin
      unique case (fs)
        F_IDLE: if (out_start) fs <= F_OUT;
        F_OUT:  if (out_done)  fs <= F_FC1;
        F_FC1:  if (fc1_done)  fs <= F_FC2;
        F_FC2:  if (fc2_done)  fs <= F_IDLE;
      endcase
    end
  end
endmodule
