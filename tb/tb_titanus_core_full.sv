// tb_titanus_core_full -- end-to-end test of the paper-size core: titanus_core
// is instantiated with no parameter override (768 channels, 12 heads, 3072
// FFN channels, 16 lanes, 8 HQE levels, 128 prefill tokens at most). A short
// sequence (3 prefill, 3 decode tokens, one FFN pass) keeps the run time low;
// saturation is not required since 8 levels are not used up in 3 decode
// tokens. The test itself is tb_titanus_core_env; see there.
module tb_titanus_core_full;
  tb_titanus_core_env #(.D(768), .DFF(3072), .HEADS(12), .MAXP(128), .LEVELS(8),
                        .NPRE(3), .NDEC(3), .NFFN(1), .FULL(1), .REQ_SAT(0)) env ();
endmodule
