// nz_expand -- puts packed non-zero values back at their channel positions.
//
// The compressed KV format carries a bit map (index or label) and only the
// values whose bit is set, packed from lane 0 upward. Lane i of the output
// takes packed element number popcount(map[i-1:0]) when map[i] is set and is
// zero otherwise. Purely combinational; used wherever the paper's units read
// "index plus non-zero data" (MMF, quantizer, dequantizer).
module nz_expand
  import titanus_pkg::*;
#(
  parameter int unsigned LANES = titanus_pkg::PAR
) (
  input  logic [LANES-1:0] map,
  input  i8_t  [LANES-1:0] packed_in,
  output i8_t  [LANES-1:0] expanded
);
  always_comb begin
    int unsigned k;
    k = 0;
    expanded = '0;
    for (int i = 0; i < LANES; i++) begin
      if (map[i]) begin
        expanded[i] = packed_in[k];
        k++;
      end
    end
  end
endmodule
