// bh_window: Blackman-Harris time-domain weighting and framing of the ADC
// data, as done by the FPGA on the ADC module.
//
// Each clock the ADC delivers a field of eight R and eight L samples. The
// block groups FFT_N/8 consecutive fields into one frame of FFT_N samples per
// hand, multiplies sample n of the frame by the window coefficient w(n) and
// rounds the product back to 8 bits. The coefficients sit in a lookup table,
// split into eight banks so that the eight samples of a field are weighted
// in the same clock (bank j holds w(8p+j)).
//
// A frame may only begin while `enable` is high; a frame once begun always
// runs to its end. With `enable` low the incoming fields are discarded, which
// is how the calibration controller blanks the data while the noise source
// switches.
//
// Interface: in_valid/in_field from the ADC; out_valid/out_sof/out_eof/
// out_field towards the frame demultiplexer, one clock after the input.
// last_accept is high, combinationally, in the clock in which the last field
// of a frame is taken.
//
// From the paper: the Blackman-Harris window, its place in the ADC-module
// FPGA and its form as a lookup table. This design's choices: the 4-term
// Blackman-Harris coefficients (a0..a3 = 0.35875, 0.48829, 0.14128,
// 0.01168) with period FFT_N, 16-bit unsigned coefficients scaled so that
// the peak is 65535, and rounding half up after the product.
module bh_window
  import polarimeter_pkg::*;
#(
  parameter int unsigned FFT_N = FFT_N_DEF
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   enable,
  input  logic   in_valid,
  input  field_t in_field,
  output logic   last_accept,
  output logic   out_valid,
  output logic   out_sof,
  output logic   out_eof,
  output field_t out_field
);
  localparam int unsigned P  = FFT_N / FIELD;     // fields per frame
  localparam int unsigned PW = (P > 1) ? $clog2(P) : 1;

  logic [WIN_W-1:0] rom [FIELD][P];

  function automatic logic [WIN_W-1:0] bh_coef(int unsigned n);
    real x, w;
    x = 2.0 * 3.14159265358979323846 * real'(n) / real'(FFT_N);
    w = 0.35875 - 0.48829 * $cos(x) + 0.14128 * $cos(2.0 * x) - 0.01168 * $cos(3.0 * x);
    w = w * real'((1 << WIN_W) - 1) + 0.5;
    if (w < 0.0) w = 0.0;
    return WIN_W'($rtoi(w));
  endfunction

  initial begin
    for (int unsigned j = 0; j < FIELD; j++)
      for (int unsigned p = 0; p < P; p++)
        rom[j][p] = bh_coef(p * FIELD + j);
  end

  logic [PW-1:0] pos;
  logic          active;
  logic          take;

  // a field is taken when a frame is running, or a new one may start
  assign take        = in_valid && (active || enable);
  assign last_accept = take && (pos == PW'(P - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos    <= '0;
      active <= 1'b0;
    end else if (take) begin
      if (pos == PW'(P - 1)) begin
        pos    <= '0;
        active <= 1'b0;
      end else begin
        pos    <= pos + 1'b1;
        active <= 1'b1;
      end
    end
  end

  function automatic logic [ADC_W-1:0] weigh(logic [ADC_W-1:0] x, logic [WIN_W-1:0] w);
    logic signed [ADC_W+WIN_W:0] p;
    p = $signed(x) * $signed({1'b0, w});
    p = p + (ADC_W + WIN_W + 1)'(1 << (WIN_W - 1));
    return ADC_W'(p >>> WIN_W);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_eof   <= 1'b0;
      out_field <= '0;
    end else begin
      out_valid <= take;
      out_sof   <= take && (pos == '0);
      out_eof   <= last_accept;
      if (take)
        for (int j = 0; j < FIELD; j++) begin
          out_field.r[j] <= weigh(in_field.r[j], rom[j][pos]);
          out_field.l[j] <= weigh(in_field.l[j], rom[j][pos]);
        end
    end
  end

endmodule
