// ce_mu -- multiplication unit (MU) of the computing engine.
//
// LANES int8 x int8 multipliers followed by an adder tree. A comparator turns
// on only the first n_act lanes (the processed data size), and a zero detector
// per lane skips the multiplication when either operand is zero, so sparse KV
// data from pruning and dequantization costs no multiplier activity. mul_cnt
// and skip_cnt count the active lanes that did and did not multiply.
// Combinational; the engine registers around it.
module ce_mu
  import titanus_pkg::*;
#(
  parameter int unsigned LANES = titanus_pkg::MU_LANES,
  localparam int unsigned CW   = $clog2(LANES + 1),
  localparam int unsigned SW   = 16 + $clog2(LANES) + 1
) (
  input  i8_t [LANES-1:0]      a,
  input  i8_t [LANES-1:0]      b,
  input  logic [CW-1:0]        n_act,
  output logic signed [SW-1:0] sum,
  output logic [CW-1:0]        mul_cnt,
  output logic [CW-1:0]        skip_cnt
);
  always_comb begin
    sum      = '0;
    mul_cnt  = '0;
    skip_cnt = '0;
    for (int i = 0; i < LANES; i++) begin
      if (CW'(i) < n_act) begin
        if (a[i] != 0 && b[i] != 0) begin
          sum     = sum + SW'(a[i] * b[i]);
          mul_cnt = mul_cnt + 1'b1;
        end else begin
          skip_cnt = skip_cnt + 1'b1;
        end
      end
    end
  end
endmodule
