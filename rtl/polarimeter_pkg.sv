// polarimeter_pkg: constants and types shared by the FPGA polarimeter.
//
// The polarimeter digitises the right- (R) and left-hand (L) circular
// polarisation signals at 1 GS/s with 8 bits, windows them, Fourier
// transforms frames of 4096 samples and integrates the four correlation
// products RR, LL, RL = Re(R L*) and LR = Im(R L*) in 2048 frequency
// channels. The widths below are the ones printed on the FFT-lane block
// diagram: 8-bit samples, 21-bit FFT output, 22-bit decoded spectra, 44-bit
// products, 54-bit lane accumulators and 32-bit output words. The 16-bit
// window coefficient width is this design's own choice.
package polarimeter_pkg;

  // ---- sizes of the instrument as built ----
  localparam int unsigned FFT_N_DEF    = 4096;  // complex FFT points per frame
  localparam int unsigned FIELD        = 8;     // samples per hand per 125 MHz clock
  localparam int unsigned N_INT_DEF    = 760;   // spectra summed per lane per integration
  localparam int unsigned LANES_DEF    = 4;     // FFT lanes per VP70 FPGA
  localparam int unsigned MODULES_DEF  = 2;     // VP70 FPGA modules
  localparam int unsigned SWITCH_DEF   = 25000; // 200 us at 125 MHz

  // ---- word widths ----
  localparam int unsigned ADC_W   = 8;
  localparam int unsigned WIN_W   = 16;
  localparam int unsigned FFT_W   = 21;
  localparam int unsigned DEC_W   = 22;
  localparam int unsigned PROD_W  = 44;
  localparam int unsigned ACC_W   = 54;
  localparam int unsigned SUM_W   = ACC_W + 2;  // sum of up to four lanes
  localparam int unsigned OUT_W   = 32;

  typedef logic signed [ADC_W-1:0] sample_t;

  // One ADC clock's worth of data: eight R samples and eight L samples.
  // Element 0 is the earliest sample in time.
  typedef struct packed {
    logic [FIELD-1:0][ADC_W-1:0] r;
    logic [FIELD-1:0][ADC_W-1:0] l;
  } field_t;

  // One channel of the decoded R and L spectra (each scaled by two).
  typedef struct packed {
    logic signed [DEC_W-1:0] rr;  // Re(R)
    logic signed [DEC_W-1:0] ri;  // Im(R)
    logic signed [DEC_W-1:0] lr;  // Re(L)
    logic signed [DEC_W-1:0] li;  // Im(L)
  } dec_t;

  // The four correlation products of one channel.
  typedef struct packed {
    logic signed [PROD_W-1:0] rr;
    logic signed [PROD_W-1:0] ll;
    logic signed [PROD_W-1:0] rl;
    logic signed [PROD_W-1:0] lr;
  } prod_t;

  typedef struct packed {
    logic signed [ACC_W-1:0] rr;
    logic signed [ACC_W-1:0] ll;
    logic signed [ACC_W-1:0] rl;
    logic signed [ACC_W-1:0] lr;
  } acc_t;

  // Output word of one channel. The products are packed RR, RL, LR, LL from
  // the most significant end, the order the instrument's block diagram gives
  // for the output.
  typedef struct packed {
    logic signed [OUT_W-1:0] rr;
    logic signed [OUT_W-1:0] rl;
    logic signed [OUT_W-1:0] lr;
    logic signed [OUT_W-1:0] ll;
  } spec_t;

endpackage
