// frame_fifo: the FIFO at the head of each FFT lane.
//
// Frames arrive as bursts of fields (eight R and eight L samples per clock)
// and leave as one R,L sample pair per clock, the rate of the FFT core. A
// lane is handed one frame of FFT_N samples every FFT_N clocks on average,
// so the FIFO drains exactly as fast as it is filled; it holds DEPTH_FRAMES
// frames to absorb the burstiness of the input.
//
// Output: out_valid with the pair (out_r, out_l), out_sof on the first pair
// of every frame (the FFT core's start), counted from reset. Reading begins
// as soon as a field is stored and never pauses while data are present. A
// field written while the FIFO is full is lost and sets the sticky
// `overflow` flag.
//
// From the paper: the lane FIFO, 8-bit data, buffering a frame and the 125
// MHz clock. This design's choices: the depth of two frames, the width
// conversion inside the FIFO and the sticky overflow flag.
module frame_fifo
  import polarimeter_pkg::*;
#(
  parameter int unsigned FFT_N        = FFT_N_DEF,
  parameter int unsigned DEPTH_FRAMES = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  field_t           in_field,
  output logic             out_valid,
  output logic             out_sof,
  output logic [ADC_W-1:0] out_r,
  output logic [ADC_W-1:0] out_l,
  output logic             overflow
);
  localparam int unsigned DEPTH = DEPTH_FRAMES * FFT_N / FIELD;  // words
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned NW    = $clog2(FFT_N);

  field_t          mem [DEPTH];
  logic [AW-1:0]   wr_ptr, rd_ptr;
  logic [AW:0]     count;
  logic [2:0]      sub;
  logic [NW-1:0]   pair_cnt;
  logic            push, pop, full, empty;

  assign full  = (count == (AW + 1)'(DEPTH));
  assign empty = (count == '0);
  assign push  = in_valid && !full;
  assign pop   = !empty && (sub == 3'(FIELD - 1));

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_field;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr    <= '0;
      rd_ptr    <= '0;
      count     <= '0;
      sub       <= '0;
      pair_cnt  <= '0;
      overflow  <= 1'b0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_r     <= '0;
      out_l     <= '0;
    end else begin
      if (in_valid && full) overflow <= 1'b1;
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW + 1)'(push) - (AW + 1)'(pop);
      out_valid <= !empty;
      out_sof   <= !empty && (pair_cnt == '0);
      if (!empty) begin
        out_r    <= mem[rd_ptr].r[sub];
        out_l    <= mem[rd_ptr].l[sub];
        sub      <= sub + 1'b1;
        pair_cnt <= pair_cnt + 1'b1;
      end
    end
  end

endmodule
