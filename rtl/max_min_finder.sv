// max_min_finder -- per-channel maximum and minimum of the prefill KV cache.
//
// Holds one running max and min per channel for Key and for Value. clear loads
// the initial values the paper gives (max = -128, min = 127). Each update
// presents one group of LANES channels of one token as an index bit map I and
// the packed non-zero data D; the data are expanded to the channel positions
// (current data C) and a channel's max/min change only where I is 1, so zeros
// produced by pruning never narrow or widen the range. Key and Value are
// updated in the same cycle. Reads are combinational, by group.
// Timing: one group per cycle, result visible the cycle after the update.
module max_min_finder
  import titanus_pkg::*;
#(
  parameter int unsigned D     = titanus_pkg::D_MODEL,
  parameter int unsigned LANES = titanus_pkg::PAR,
  localparam int unsigned G    = (D + LANES - 1) / LANES,
  localparam int unsigned GW   = $clog2(G + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             upd,
  input  logic [GW-1:0]    upd_g,
  input  logic [LANES-1:0] idx_k,
  input  i8_t  [LANES-1:0] nz_k,
  input  logic [LANES-1:0] idx_v,
  input  i8_t  [LANES-1:0] nz_v,
  input  logic [GW-1:0]    rd_g,
  output i8_t  [LANES-1:0] max_k,
  output i8_t  [LANES-1:0] min_k,
  output i8_t  [LANES-1:0] max_v,
  output i8_t  [LANES-1:0] min_v
);
  i8_t [LANES-1:0] mxk [G];
  i8_t [LANES-1:0] mnk [G];
  i8_t [LANES-1:0] mxv [G];
  i8_t [LANES-1:0] mnv [G];
  i8_t [LANES-1:0] ck, cv;

  nz_expand #(.LANES(LANES)) u_exk (.map(idx_k), .packed_in(nz_k), .expanded(ck));
  nz_expand #(.LANES(LANES)) u_exv (.map(idx_v), .packed_in(nz_v), .expanded(cv));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < G; g++) begin
        mxk[g] <= {LANES{-8'sd128}};
        mnk[g] <= {LANES{8'sd127}};
        mxv[g] <= {LANES{-8'sd128}};
        mnv[g] <= {LANES{8'sd127}};
      end
    end else if (clear) begin
      for (int g = 0; g < G; g++) begin
        mxk[g] <= {LANES{-8'sd128}};
        mnk[g] <= {LANES{8'sd127}};
        mxv[g] <= {LANES{-8'sd128}};
        mnv[g] <= {LANES{8'sd127}};
      end
    end else if (upd) begin
      for (int i = 0; i < LANES; i++) begin
        if (idx_k[i] && ck[i] > mxk[upd_g][i]) mxk[upd_g][i] <= ck[i];
        if (idx_k[i] && ck[i] < mnk[upd_g][i]) mnk[upd_g][i] <= ck[i];
        if (idx_v[i] && cv[i] > mxv[upd_g][i]) mxv[upd_g][i] <= cv[i];
        if (idx_v[i] && cv[i] < mnv[upd_g][i]) mnv[upd_g][i] <= cv[i];
      end
    end
  end

  assign max_k = mxk[rd_g];
  assign min_k = mnk[rd_g];
  assign max_v = mxv[rd_g];
  assign min_v = mnv[rd_g];
endmodule
