// tb_polarimeter_top: end-to-end test of the polarimeter at reduced size
// (1024-point FFT, 2 spectra per lane and integration, 40-clock switching
// time), all eight lanes with behavioural FFT cores. See
// polarimeter_tb_body.svh for what is checked.
module tb_polarimeter_top;
  import polarimeter_pkg::*;
  localparam int unsigned T_FFT_N   = 1024;
  localparam int unsigned T_N_INT   = 2;
  localparam int unsigned T_LANES   = 4;
  localparam int unsigned T_MODULES = 2;
  localparam int unsigned T_SWITCH  = 40;
  localparam int          RUN_INTS  = 4;
  localparam bit          TWO_RUNS  = 1'b1;
  localparam longint      WATCHDOG_NS = 10_000_000;

  `include "polarimeter_tb_body.svh"

  polarimeter_top #(
    .FFT_N(T_FFT_N), .N_INT(T_N_INT), .LANES(T_LANES), .MODULES(T_MODULES), .SWITCH_CYCLES(T_SWITCH)
  ) dut (.*);
endmodule
