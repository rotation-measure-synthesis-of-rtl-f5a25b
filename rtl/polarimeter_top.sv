// polarimeter_top: the digital FFT polarimeter.
//
// The ADC module's FPGA windows the 1 GS/s, 8-bit R and L data and hands
// whole frames of FFT_N samples alternately to two FPGA modules; each of
// those spreads its frames over four FFT lanes, each lane transforms R and
// L with one complex FFT, separates the two spectra, forms RR, LL, RL and
// LR and integrates N_INT spectra; the lanes of a module are then added
// into one set of four 32-bit spectra of FFT_N/2 channels. At the default
// sizes (4096-point FFT, 760 spectra per lane, eight lanes) an integration
// covers 6080 frames, about 25 ms, and one integration of cal-off and one
// of cal-on data form a calibration packet.
//
// Everything runs in one 125 MHz clock domain. The FFT cores (vendor IP)
// sit outside: fft_in_*[m][l] and fft_out_*[m][l] connect the core of lane l
// on module m. The spectra of the two modules leave separately on
// spec_*[m]; they still have to be added, which happens in the DSP and host
// software downstream of this RTL. cal_on drives the noise-source switch.
//
// lane_en[m][l] switches an FFT lane off; out_shift selects which 32 of the
// 56 bits of the final sum are output.
module polarimeter_top
  import polarimeter_pkg::*;
#(
  parameter int unsigned FFT_N         = FFT_N_DEF,
  parameter int unsigned N_INT         = N_INT_DEF,
  parameter int unsigned LANES         = LANES_DEF,
  parameter int unsigned MODULES       = MODULES_DEF,
  parameter int unsigned SWITCH_CYCLES = SWITCH_DEF
) (
  input  logic                                      clk,
  input  logic                                      rst_n,
  // ADC
  input  logic                                      adc_valid,
  input  field_t                                    adc_field,
  // configuration
  input  logic [MODULES-1:0][LANES-1:0]             lane_en,
  input  logic [5:0]                                out_shift,
  // FFT cores
  output logic [MODULES-1:0][LANES-1:0]             fft_in_valid,
  output logic [MODULES-1:0][LANES-1:0]             fft_in_sof,
  output logic [MODULES-1:0][LANES-1:0][ADC_W-1:0]  fft_in_re,
  output logic [MODULES-1:0][LANES-1:0][ADC_W-1:0]  fft_in_im,
  input  logic [MODULES-1:0][LANES-1:0]             fft_out_valid,
  input  logic [MODULES-1:0][LANES-1:0][FFT_W-1:0]  fft_out_re,
  input  logic [MODULES-1:0][LANES-1:0][FFT_W-1:0]  fft_out_im,
  // integrated spectra, one stream per FPGA module
  output logic [MODULES-1:0]                        spec_valid,
  output logic [MODULES-1:0][$clog2(FFT_N)-2:0]     spec_chan,
  output logic [MODULES-1:0]                        spec_last,
  output spec_t [MODULES-1:0]                       spec_data,
  output logic [MODULES-1:0][15:0]                  spec_index,
  // telescope interface and status
  output logic                                      cal_on,
  output logic [15:0]                               int_index,
  output logic [15:0]                               blank_count,
  output logic [MODULES-1:0][LANES-1:0]             fifo_overflow,
  output logic [MODULES-1:0][LANES-1:0]             decode_overrun,
  output logic [MODULES-1:0][LANES-1:0]             acc_overrun,
  output logic [MODULES-1:0][31:0]                  frames_dropped,
  output logic [MODULES-1:0][31:0]                  sat_count
);
  logic [MODULES-1:0] mod_valid;
  logic               mod_sof, mod_eof;
  field_t             mod_field;

  adc_fpga #(
    .FFT_N(FFT_N), .MODULES(MODULES),
    .FRAMES_PER_INT(MODULES * LANES * N_INT), .SWITCH_CYCLES(SWITCH_CYCLES)
  ) u_adc_fpga (
    .clk, .rst_n, .adc_valid, .adc_field,
    .mod_valid, .mod_sof, .mod_eof, .mod_field,
    .cal_on, .int_index, .blank_count
  );

  for (genvar m = 0; m < MODULES; m++) begin : g_mod
    fpga_module #(.FFT_N(FFT_N), .N_INT(N_INT), .LANES(LANES)) u_fpga (
      .clk, .rst_n, .lane_en(lane_en[m]), .out_shift,
      .in_valid(mod_valid[m]), .in_sof(mod_sof), .in_eof(mod_eof), .in_field(mod_field),
      .fft_in_valid(fft_in_valid[m]), .fft_in_sof(fft_in_sof[m]),
      .fft_in_re(fft_in_re[m]), .fft_in_im(fft_in_im[m]),
      .fft_out_valid(fft_out_valid[m]), .fft_out_re(fft_out_re[m]), .fft_out_im(fft_out_im[m]),
      .out_valid(spec_valid[m]), .out_chan(spec_chan[m]), .out_last(spec_last[m]),
      .out_spec(spec_data[m]), .out_index(spec_index[m]),
      .fifo_overflow(fifo_overflow[m]), .decode_overrun(decode_overrun[m]),
      .acc_overrun(acc_overrun[m]), .frames_dropped(frames_dropped[m]), .sat_count(sat_count[m])
    );
  end

endmodule
