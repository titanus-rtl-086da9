// ce_vpu -- vector processing unit (VPU) of the computing engine.
//
// MUS multiplication units of MU_LANES lanes each. The VPU controller turns on
// only as many MUs as the n_act elements it received need (ceil(n_act /
// MU_LANES)), giving each MU its share of the n_act elements, and the local
// accumulator adds the results of the enabled MUs. Combinational.
module ce_vpu
  import titanus_pkg::*;
#(
  parameter int unsigned MUS      = titanus_pkg::CE_MUS,
  parameter int unsigned MU_LANES = titanus_pkg::MU_LANES,
  localparam int unsigned N       = MUS * MU_LANES,
  localparam int unsigned NW      = $clog2(N + 1),
  localparam int unsigned CW      = $clog2(MU_LANES + 1),
  localparam int unsigned SW      = 16 + $clog2(N) + 1
) (
  input  i8_t [N-1:0]          a,
  input  i8_t [N-1:0]          b,
  input  logic [NW-1:0]        n_act,
  output logic signed [SW-1:0] sum,
  output logic [NW-1:0]        mul_cnt,
  output logic [NW-1:0]        skip_cnt,
  output logic [MUS-1:0]       mu_en
);
  localparam int unsigned MSW = 16 + $clog2(MU_LANES) + 1;
  logic signed [MSW-1:0] mu_sum [MUS];
  logic [CW-1:0]         mu_n   [MUS];
  logic [CW-1:0]         mu_mul [MUS];
  logic [CW-1:0]         mu_skp [MUS];

  for (genvar m = 0; m < MUS; m++) begin : g_mu
    // controller: lanes handed to MU m
    always_comb begin
      if (32'(n_act) >= (m + 1) * MU_LANES) mu_n[m] = CW'(MU_LANES);
      else if (32'(n_act) > m * MU_LANES)   mu_n[m] = CW'(32'(n_act) - m * MU_LANES);
      else                                  mu_n[m] = '0;
      mu_en[m] = mu_n[m] != 0;
    end
    ce_mu #(.LANES(MU_LANES)) u_mu (
      .a(a[m*MU_LANES +: MU_LANES]), .b(b[m*MU_LANES +: MU_LANES]), .n_act(mu_n[m]),
      .sum(mu_sum[m]), .mul_cnt(mu_mul[m]), .skip_cnt(mu_skp[m]));
  end

  // local accumulator over the enabled MUs
  always_comb begin
    sum      = '0;
    mul_cnt  = '0;
    skip_cnt = '0;
    for (int m = 0; m < MUS; m++) begin
      if (mu_en[m]) begin
        sum      = sum + SW'(mu_sum[m]);
        mul_cnt  = mul_cnt + NW'(mu_mul[m]);
        skip_cnt = skip_cnt + NW'(mu_skp[m]);
      end
    end
  end
endmodule
