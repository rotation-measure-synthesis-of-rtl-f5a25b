// tb_polarimeter_full: the polarimeter at its full size (4096-point FFT,
// 760 spectra per lane, eight lanes, 200 us switching time) taken through
// two complete integrations, one cal-off and one cal-on, about 6.3 million
// clocks. Only run A of polarimeter_tb_body.svh is done.
module tb_polarimeter_full;
  import polarimeter_pkg::*;
  localparam int unsigned T_FFT_N   = FFT_N_DEF;
  localparam int unsigned T_N_INT   = N_INT_DEF;
  localparam int unsigned T_LANES   = LANES_DEF;
  localparam int unsigned T_MODULES = MODULES_DEF;
  localparam int unsigned T_SWITCH  = SWITCH_DEF;
  localparam int          RUN_INTS  = 2;
  localparam bit          TWO_RUNS  = 1'b0;
  localparam longint      WATCHDOG_NS = 80_000_000;

  `include "polarimeter_tb_body.svh"

  polarimeter_top dut (.*);
endmodule
