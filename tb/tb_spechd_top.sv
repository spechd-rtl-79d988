// tb_spechd_top: end-to-end test of spechd_top at reduced size (512-bit
// hypervectors, 16 spectra per kernel run, everything else at its default);
// see spechd_tb_body.svh for the stimulus and the checks.
`define SPECHD_DUT_PARAMS #(.DHV(512), .MAX_N(16))
module tb_spechd_top;
  localparam int unsigned TB_DHV = 512, TB_MAX_N = 16;
`include "spechd_tb_body.svh"
endmodule
