// tb_spechd_full: the same end-to-end run as tb_spechd_top with spechd_top
// at its default sizes (2048-bit hypervectors, five kernels of 256 spectra);
// the split bucket therefore holds 260 spectra.
`define SPECHD_DUT_PARAMS
module tb_spechd_full;
  localparam int unsigned TB_DHV = 2048, TB_MAX_N = 256;
`include "spechd_tb_body.svh"
endmodule
