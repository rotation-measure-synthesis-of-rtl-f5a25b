// frame_demux: distributes whole frames over N_OUT outputs in turn.
//
// The same block appears twice in the polarimeter: 1:2 in the ADC-module
// FPGA, sending alternate frames to the two VP70 FPGA modules, and 1:4 in
// each VP70, sending every fourth frame to each of its FFT lanes. Frame f
// after reset goes to output f mod N_OUT. An output whose enable bit is low
// (a switched-off FFT lane) does not receive its frames: they are dropped,
// not handed to another output, so every enabled output still receives the
// same number of frames per integration. Enable is sampled at the first
// field of each frame.
//
// Interface: in_valid/in_sof/in_eof/in_data carry fields; out_valid[i]
// selects the output, out_sof/out_eof/out_data are shared by all outputs.
// Latency one clock. frames_dropped counts frames sent to disabled outputs.
//
// From the paper: frames are distributed equally, 1/2 to each FPGA module
// and 1/8 to each FFT lane; the lane count and a lane that is switched off
// losing its share of the samples. This design's choices: strict
// round-robin order and dropping rather than redistributing.
module frame_demux
  import polarimeter_pkg::*;
#(
  parameter int unsigned N_OUT = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_OUT-1:0] out_en,
  input  logic             in_valid,
  input  logic             in_sof,
  input  logic             in_eof,
  input  field_t           in_data,
  output logic [N_OUT-1:0] out_valid,
  output logic             out_sof,
  output logic             out_eof,
  output field_t           out_data,
  output logic [31:0]      frames_dropped
);
  localparam int unsigned SW = (N_OUT > 1) ? $clog2(N_OUT) : 1;

  logic [SW-1:0] sel;
  logic          keep;      // enable of the frame in progress
  logic          keep_now;

  assign keep_now = in_sof ? out_en[sel] : keep;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel            <= '0;
      keep           <= 1'b0;
      out_valid      <= '0;
      out_sof        <= 1'b0;
      out_eof        <= 1'b0;
      out_data       <= '0;
      frames_dropped <= '0;
    end else begin
      out_valid <= '0;
      out_sof   <= 1'b0;
      out_eof   <= 1'b0;
      if (in_valid) begin
        keep     <= keep_now;
        out_data <= in_data;
        out_sof  <= in_sof;
        out_eof  <= in_eof;
        out_valid[sel] <= keep_now;
        if (in_sof && !keep_now)
          frames_dropped <= frames_dropped + 1'b1;
        if (in_eof)
          sel <= (sel == SW'(N_OUT - 1)) ? '0 : sel + 1'b1;
      end
    end
  end

endmodule
