// computing_engine -- zero-skipping dot-product engine (CE) for attention.
//
// Computes sum_j a[j] * b[j] over a vector of len elements, CAP = VPUS x MUS x
// MU_LANES (256) elements per cycle. The parts are the paper's: a workload
// scheduler (WS), a computing array (CA) of VPUs, an accumulator and an input
// buffer. The WS splits the vector into chunks of CAP elements and covers the
// paper's three cases: len < CAP (one partial chunk, case 1), len = x*CAP (x
// full chunks, case 2) and len = (x+y)*CAP with 0<y<1 (x full chunks and a
// partial one, case 3). The CA distributes each chunk evenly over all VPUs --
// element j goes to VPU j mod VPUS -- each VPU enables only the MUs it needs,
// each MU only its active lanes, and zero operands skip their multiplier.
//
// Interface: start with len (>0) begins an operation (in_ready goes high the
// next cycle); then one chunk per cycle on in_a/in_b while in_valid, chunk k
// holding elements k*CAP ... k*CAP+CAP-1 in lanes 0..CAP-1. done pulses with
// result, the case number (1..3), and the operation's multiply and skip
// counts. Timing: with chunks at full rate, done is high n + 1 clock edges
// after the edge that takes start (n chunks, then one edge through the array
// and accumulator), so one engine finishes an n-chunk vector every n + 2
// cycles.
// The chunk handshake and the lane-to-VPU mapping are this design's choice.
module computing_engine
  import titanus_pkg::*;
#(
  parameter int unsigned VPUS     = titanus_pkg::CE_VPUS,
  parameter int unsigned MUS      = titanus_pkg::CE_MUS,
  parameter int unsigned MU_LANES = titanus_pkg::MU_LANES,
  parameter int unsigned LEN_W    = 16,
  localparam int unsigned VN      = MUS * MU_LANES,
  localparam int unsigned CAP     = VPUS * VN,
  localparam int unsigned VNW     = $clog2(VN + 1),
  localparam int unsigned CPW     = $clog2(CAP + 1),
  localparam int unsigned VSW     = 16 + $clog2(VN) + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [LEN_W-1:0]  len,
  output logic              in_ready,
  input  logic              in_valid,
  input  i8_t [CAP-1:0]     in_a,
  input  i8_t [CAP-1:0]     in_b,
  output logic              done,
  output logic signed [31:0] result,
  output logic [1:0]        case_id,
  output logic [31:0]       mul_total,
  output logic [31:0]       skip_total,
  output logic [VPUS*MUS-1:0] mu_en_seen   // MUs used at least once in the operation
);
  // ---------------- workload scheduler ----------------
  logic             busy;
  logic [LEN_W-1:0] left;        // elements not yet issued
  logic             last_in;

  assign in_ready = busy;
  assign last_in  = busy && in_valid && (32'(left) <= CAP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      left    <= '0;
      case_id <= '0;
    end else if (start && !busy) begin
      busy <= len != 0;
      left <= len;
      if (32'(len) < CAP)             case_id <= 2'd1;
      else if (32'(len) % CAP == 0)   case_id <= 2'd2;
      else                            case_id <= 2'd3;
    end else if (busy && in_valid) begin
      if (last_in) begin
        busy <= 1'b0;
        left <= '0;
      end else begin
        left <= left - LEN_W'(CAP);
      end
    end
  end

  // ---------------- input buffer ----------------
  i8_t [CAP-1:0]  ba, bb;
  logic [CPW-1:0] b_n;
  logic           b_valid, b_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ba      <= '0;
      bb      <= '0;
      b_n     <= '0;
      b_valid <= 1'b0;
      b_last  <= 1'b0;
    end else begin
      b_valid <= busy && in_valid;
      b_last  <= last_in;
      if (busy && in_valid) begin
        ba  <= in_a;
        bb  <= in_b;
        b_n <= (32'(left) >= CAP) ? CPW'(CAP) : CPW'(left);
      end
    end
  end

  // ---------------- computing array ----------------
  logic signed [VSW-1:0] v_sum [VPUS];
  logic [VNW-1:0]        v_n   [VPUS];
  logic [VNW-1:0]        v_mul [VPUS];
  logic [VNW-1:0]        v_skp [VPUS];
  logic [MUS-1:0]        v_en  [VPUS];

  for (genvar v = 0; v < VPUS; v++) begin : g_vpu
    i8_t [VN-1:0] va, vb;
    always_comb begin
      for (int k = 0; k < VN; k++) begin
        va[k] = ba[k * VPUS + v];
        vb[k] = bb[k * VPUS + v];
      end
      // elements v, v+VPUS, ... below b_n
      v_n[v] = (32'(b_n) > v) ? VNW'((32'(b_n) - v + VPUS - 1) / VPUS) : '0;
    end
    ce_vpu #(.MUS(MUS), .MU_LANES(MU_LANES)) u_vpu (
      .a(va), .b(vb), .n_act(v_n[v]), .sum(v_sum[v]),
      .mul_cnt(v_mul[v]), .skip_cnt(v_skp[v]), .mu_en(v_en[v]));
  end

  logic signed [31:0] ca_sum;
  logic [31:0]        ca_mul, ca_skp;
  logic [VPUS*MUS-1:0] ca_en;
  always_comb begin
    ca_sum = '0;
    ca_mul = '0;
    ca_skp = '0;
    for (int v = 0; v < VPUS; v++) begin
      ca_sum = ca_sum + 32'(v_sum[v]);
      ca_mul = ca_mul + 32'(v_mul[v]);
      ca_skp = ca_skp + 32'(v_skp[v]);
      ca_en[v*MUS +: MUS] = v_en[v];
    end
  end

  // ---------------- accumulator ----------------
  logic signed [31:0] acc;
  logic [31:0]        macc, sacc;
  logic [VPUS*MUS-1:0] eacc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc        <= '0;
      macc       <= '0;
      sacc       <= '0;
      eacc       <= '0;
      done       <= 1'b0;
      result     <= '0;
      mul_total  <= '0;
      skip_total <= '0;
      mu_en_seen <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        acc  <= '0;
        macc <= '0;
        sacc <= '0;
        eacc <= '0;
      end else if (b_valid) begin
        if (b_last) begin
          acc        <= '0;
          macc       <= '0;
          sacc       <= '0;
          eacc       <= '0;
          done       <= 1'b1;
          result     <= acc + ca_sum;
          mul_total  <= macc + ca_mul;
          skip_total <= sacc + ca_skp;
          mu_en_seen <= eacc | ca_en;
        end else begin
          acc  <= acc + ca_sum;
          macc <= macc + ca_mul;
          sacc <= sacc + ca_skp;
          eacc <= eacc | ca_en;
        end
      end
    end
  end
endmodule
