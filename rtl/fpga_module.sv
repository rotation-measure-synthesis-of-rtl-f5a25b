// fpga_module: one of the two VP70 FPGA modules of the polarimeter.
//
// The module receives every second frame of windowed data from the ADC
// module and hands its frames in turn to LANES identical FFT lanes (the
// 1:4 demultiplexer). A lane is
//   frame_fifo -> FFT core -> spectrum_decode -> complex_mult -> lane_accumulator
// and one lane_combiner adds the lanes' integrations into the module's
// 32-bit output spectra.
//
// The FFT cores are the FPGA vendor's library cores and are not part of this
// RTL: each lane's FFT input (R as real, L as imaginary part, one pair per
// clock, start on the first pair of a frame) leaves the module on fft_in_*,
// and the transform, FFT_N 21-bit complex words in natural order, one per
// clock, comes back on fft_out_*. Any latency is accepted as long as a
// lane's frames come back in order and without gaps inside a frame.
//
// lane_en switches lanes off; their frames are dropped. The status outputs
// are sticky error flags of each lane and counters of dropped frames and
// clipped output words.
//
// From the paper: the structure DEMUX, FIFO, FFT, DE-CODE, COMPLEX MULT,
// per-lane summation and final summation, four lanes per FPGA, and lanes
// that can be switched off. Handshakes and status outputs are this design's.
module fpga_module
  import polarimeter_pkg::*;
#(
  parameter int unsigned FFT_N = FFT_N_DEF,
  parameter int unsigned N_INT = N_INT_DEF,
  parameter int unsigned LANES = LANES_DEF
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [LANES-1:0]             lane_en,
  input  logic [5:0]                   out_shift,
  // frames from the ADC module
  input  logic                         in_valid,
  input  logic                         in_sof,
  input  logic                         in_eof,
  input  field_t                       in_field,
  // FFT cores, one per lane
  output logic [LANES-1:0]             fft_in_valid,
  output logic [LANES-1:0]             fft_in_sof,
  output logic [LANES-1:0][ADC_W-1:0]  fft_in_re,
  output logic [LANES-1:0][ADC_W-1:0]  fft_in_im,
  input  logic [LANES-1:0]             fft_out_valid,
  input  logic [LANES-1:0][FFT_W-1:0]  fft_out_re,
  input  logic [LANES-1:0][FFT_W-1:0]  fft_out_im,
  // integrated spectra
  output logic                         out_valid,
  output logic [$clog2(FFT_N)-2:0]     out_chan,
  output logic                         out_last,
  output spec_t                        out_spec,
  output logic [15:0]                  out_index,
  // status
  output logic [LANES-1:0]             fifo_overflow,
  output logic [LANES-1:0]             decode_overrun,
  output logic [LANES-1:0]             acc_overrun,
  output logic [31:0]                  frames_dropped,
  output logic [31:0]                  sat_count
);
  localparam int unsigned CW = $clog2(FFT_N) - 1;

  logic [LANES-1:0] l_valid;
  logic             l_sof, l_eof;
  field_t           l_field;

  frame_demux #(.N_OUT(LANES)) u_lane_demux (
    .clk, .rst_n, .out_en(lane_en),
    .in_valid, .in_sof, .in_eof, .in_data(in_field),
    .out_valid(l_valid), .out_sof(l_sof), .out_eof(l_eof), .out_data(l_field),
    .frames_dropped
  );

  logic [LANES-1:0] hold_valid, hold_ack;
  logic [CW-1:0]    rd_addr;
  acc_t             rd_data [LANES];

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    logic          d_valid, d_last, m_valid, m_last;
    logic [CW-1:0] d_chan, m_chan;
    dec_t          d_dec;
    prod_t         m_prod;

    frame_fifo #(.FFT_N(FFT_N)) u_fifo (
      .clk, .rst_n, .in_valid(l_valid[i]), .in_field(l_field),
      .out_valid(fft_in_valid[i]), .out_sof(fft_in_sof[i]),
      .out_r(fft_in_re[i]), .out_l(fft_in_im[i]), .overflow(fifo_overflow[i])
    );

    spectrum_decode #(.FFT_N(FFT_N)) u_decode (
      .clk, .rst_n, .in_valid(fft_out_valid[i]), .in_re(fft_out_re[i]), .in_im(fft_out_im[i]),
      .out_valid(d_valid), .out_chan(d_chan), .out_last(d_last), .out_dec(d_dec),
      .overrun(decode_overrun[i])
    );

    complex_mult #(.CW(CW)) u_mult (
      .clk, .rst_n, .in_valid(d_valid), .in_chan(d_chan), .in_last(d_last), .in_dec(d_dec),
      .out_valid(m_valid), .out_chan(m_chan), .out_last(m_last), .out_prod(m_prod)
    );

    lane_accumulator #(.FFT_N(FFT_N), .N_INT(N_INT)) u_acc (
      .clk, .rst_n, .in_valid(m_valid), .in_chan(m_chan), .in_last(m_last), .in_prod(m_prod),
      .hold_valid(hold_valid[i]), .hold_ack(hold_ack[i]), .rd_addr, .rd_data(rd_data[i]),
      .overrun(acc_overrun[i])
    );
  end

  lane_combiner #(.FFT_N(FFT_N), .LANES(LANES)) u_comb (
    .clk, .rst_n, .lane_en, .out_shift, .hold_valid, .hold_ack, .rd_addr, .rd_data,
    .out_valid, .out_chan, .out_last, .out_spec, .out_index, .sat_count
  );

  // l_sof/l_eof are consumed through the FIFOs' own frame counting
  logic unused_ok;
  assign unused_ok = l_sof ^ l_eof;

endmodule
