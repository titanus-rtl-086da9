// tb_titanus_core -- end-to-end test of a reduced Titanus core (256 channels,
// 4 heads, 512 FFN channels, 8 prefill tokens at most, 4 HQE levels so that
// saturation is reached). The test itself is tb_titanus_core_env; see there.
module tb_titanus_core;
  tb_titanus_core_env #(.D(256), .DFF(512), .HEADS(4), .MAXP(8), .LEVELS(4),
                        .NPRE(6), .NDEC(8), .NFFN(2), .FULL(0), .REQ_SAT(1)) env ();
endmodule
