// tb_qkd_full: end-to-end test of two control boards (Alice and Bob) at the sizes of
// the paper: the top is instantiated with its default parameters (4096-bit
// reconciliation blocks, 256 Kbit privacy-amplification unit, 40 x 40 Toeplitz
// blocks, SFactor 0.3), one full unit is amplified on both sides. The scenario and
// checks are described in qkd_system_tb.svh. About 75 million clock cycles.
module tb_qkd_full;
  localparam int EC_LW = 12, PA_N = 262144, PA_BLK = 40, N_UNITS = 1, WATCHDOG = 150000000;
`define QKD_PARAMS
`include "qkd_system_tb.svh"
`undef QKD_PARAMS
endmodule
