// adc_fpga: the FPGA on the ADC module.
//
// It takes the ADC's two 8-sample fields per clock, weights them with the
// Blackman-Harris window in frames of FFT_N samples, and sends alternate
// frames to the two FPGA modules through a 1:2 frame demultiplexer. Its
// calibration controller counts the frames of an integration, switches the
// calibration noise source between integrations and blanks the data while
// the switch settles.
//
// Interface: adc_valid/adc_field from the converter (one field per 125 MHz
// clock); mod_valid[m] with the shared mod_sof/mod_eof/mod_field towards
// FPGA module m, two clocks after the ADC; cal_on to the RF switch;
// int_index and blank_count from the controller.
//
// From the paper: window and 1:2 demultiplexer in this FPGA, and noise
// source control as the polarimeter's telescope interface. Placing the
// calibration controller in this FPGA is this design's choice: it is the
// one place that sees every frame.
module adc_fpga
  import polarimeter_pkg::*;
#(
  parameter int unsigned FFT_N          = FFT_N_DEF,
  parameter int unsigned MODULES        = MODULES_DEF,
  parameter int unsigned FRAMES_PER_INT = MODULES_DEF * LANES_DEF * N_INT_DEF,
  parameter int unsigned SWITCH_CYCLES  = SWITCH_DEF
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               adc_valid,
  input  field_t             adc_field,
  output logic [MODULES-1:0] mod_valid,
  output logic               mod_sof,
  output logic               mod_eof,
  output field_t             mod_field,
  output logic               cal_on,
  output logic [15:0]        int_index,
  output logic [15:0]        blank_count
);
  logic   win_enable, last_accept;
  logic   w_valid, w_sof, w_eof;
  field_t w_field;
  logic [31:0] dropped;

  bh_window #(.FFT_N(FFT_N)) u_window (
    .clk, .rst_n, .enable(win_enable), .in_valid(adc_valid), .in_field(adc_field),
    .last_accept, .out_valid(w_valid), .out_sof(w_sof), .out_eof(w_eof), .out_field(w_field)
  );

  cal_control #(.FRAMES_PER_INT(FRAMES_PER_INT), .SWITCH_CYCLES(SWITCH_CYCLES)) u_cal (
    .clk, .rst_n, .frame_done(last_accept), .win_enable, .cal_on, .int_index, .blank_count
  );

  frame_demux #(.N_OUT(MODULES)) u_demux (
    .clk, .rst_n, .out_en('1),
    .in_valid(w_valid), .in_sof(w_sof), .in_eof(w_eof), .in_data(w_field),
    .out_valid(mod_valid), .out_sof(mod_sof), .out_eof(mod_eof), .out_data(mod_field),
    .frames_dropped(dropped)
  );

  // both modules are always enabled, so nothing is ever dropped here
  logic unused_ok;
  assign unused_ok = ^dropped;

endmodule
