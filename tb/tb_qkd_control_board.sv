// tb_qkd_control_board: end-to-end test of two control boards (Alice and Bob) at
// reduced sizes: reconciliation blocks of 1024 bits and privacy-amplification units
// of 2048 bits, two units, polarization search windows of 65536 slots. The scenario and checks are described in qkd_system_tb.svh.
// Reduced sizes are this testbench's choice to keep the run short; all else as
// in the full-size test (tb_qkd_full).
module tb_qkd_control_board;
  localparam int EC_LW = 10, PA_N = 2048, PA_BLK = 40, N_UNITS = 2, WATCHDOG = 30000000;
`define QKD_PARAMS #(.EC_LW(EC_LW), .PA_N_BITS(PA_N), .POL_WINDOW(65536))
`include "qkd_system_tb.svh"
`undef QKD_PARAMS
endmodule
