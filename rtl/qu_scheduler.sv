// qu_scheduler -- four-state controller of the quantization unit.
//
// States (the paper's four): IDLE, PREFILL (max-min finder collects the
// prefill tokens), QUANT (the non-zero quantizer first derives the level-0
// parameters of every channel group, then quantizes every buffered prefill
// token), DECODE (the channel monitor quantizes each new token). start_seq
// begins a sequence from any state; prefill_end closes the prefill stage;
// tokens arriving in DECODE are handled as they come. The QUANT walk produces
// the addresses: first G parameter steps, then n_tok x G token groups.
// The transition rules and the walk order are this design's choice.
// Timing: one parameter step or one token group per cycle; quant_done is the
// cycle of the last step, after which the state is DECODE.
module qu_scheduler
  import titanus_pkg::*;
#(
  parameter int unsigned G   = titanus_pkg::D_MODEL / titanus_pkg::PAR,
  parameter int unsigned MAXP= titanus_pkg::MAX_PREFILL,
  localparam int unsigned GW = $clog2(G + 1),
  localparam int unsigned PW = $clog2(MAXP + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start_seq,
  input  logic            prefill_end,
  input  logic [PW-1:0]   n_tok,       // prefill tokens collected
  output qu_state_e       state,
  output logic            clear,       // one cycle: reset MMF and SZ counts
  output logic            param_step,  // QUANT, phase 1: derive params of group q_g
  output logic            quant_step,  // QUANT, phase 2: quantize token q_t, group q_g
  output logic [GW-1:0]   q_g,
  output logic [PW-1:0]   q_t,
  output logic            quant_done
);
  logic phase;   // 0: parameters, 1: tokens

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= QS_IDLE;
      phase <= 1'b0;
      q_g   <= '0;
      q_t   <= '0;
      clear <= 1'b0;
    end else begin
      clear <= 1'b0;
      if (start_seq) begin
        state <= QS_PREFILL;
        clear <= 1'b1;
      end else begin
        unique case (state)
          QS_IDLE:    ;
          QS_PREFILL: if (prefill_end) begin
                        state <= QS_QUANT;
                        phase <= 1'b0;
                        q_g   <= '0;
                        q_t   <= '0;
                      end
          QS_QUANT: begin
            if (q_g == GW'(G - 1)) begin
              q_g <= '0;
              if (!phase) begin
                phase <= 1'b1;
                if (n_tok == 0) state <= QS_DECODE;
              end else if (q_t == n_tok - 1'b1) begin
                state <= QS_DECODE;
              end else begin
                q_t <= q_t + 1'b1;
              end
            end else begin
              q_g <= q_g + 1'b1;
            end
          end
          QS_DECODE:  ;
        endcase
      end
    end
  end

  assign param_step = (state == QS_QUANT) && !phase && !start_seq;
  assign quant_step = (state == QS_QUANT) &&  phase && !start_seq;
  assign quant_done = (state == QS_QUANT) && !start_seq && (q_g == GW'(G - 1)) &&
                      ((phase && q_t == n_tok - 1'b1) || (!phase && n_tok == 0));
endmodule
