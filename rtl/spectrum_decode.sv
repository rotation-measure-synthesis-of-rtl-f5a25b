// spectrum_decode: separates the R and L spectra from one complex FFT.
//
// Each lane transforms R and L together: R goes in as the real part and L
// as the imaginary part of a complex FFT, Z = X_R + j X_L. Because R and L
// are real, X[N-k] = conj(X[k]) for both, which gives
//   2 X_R[k] = Z[k] + conj(Z[N-k])      = (Zr[k]+Zr[N-k]) + j (Zi[k]-Zi[N-k])
//   2 X_L[k] = (Z[k] - conj(Z[N-k]))/j  = (Zi[k]+Zi[N-k]) + j (Zr[N-k]-Zr[k])
// for channels k = 0 .. FFT_N/2-1 (with Z[N-0] read as Z[0]). The factor two
// is kept, which is the one bit of growth from 21 to 22 bits.
//
// Z[k] and Z[N-k] come out of the FFT far apart in time, so each frame is
// written into one half of a double-buffered frame memory while the other
// half is read. Reading takes two clocks per channel (Z[k], then Z[N-k])
// from a single read port, so a frame is read in FFT_N clocks, as fast as
// the next one is written.
//
// Interface: in_valid/in_re/in_im, FFT_N consecutive valid words per frame
// in natural order, framed by counting from reset. Output: out_valid every
// second clock during a read, with the channel number, out_last on channel
// FFT_N/2-1, and the decoded values. The first channel leaves 4 clocks after
// the last word of its frame arrived. `overrun` is set if a frame starts
// into a half that has not been read yet.
//
// From the paper: the packing of R and L into one complex FFT, the 21- and
// 22-bit widths and the decode step. The frame memory, its read order and
// the timing are this design's own.
module spectrum_decode
  import polarimeter_pkg::*;
#(
  parameter int unsigned FFT_N = FFT_N_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [FFT_W-1:0]     in_re,
  input  logic [FFT_W-1:0]     in_im,
  output logic                 out_valid,
  output logic [$clog2(FFT_N)-2:0] out_chan,
  output logic                 out_last,
  output dec_t                 out_dec,
  output logic                 overrun
);
  localparam int unsigned NW = $clog2(FFT_N);

  logic [2*FFT_W-1:0] mem [2*FFT_N];

  logic          wb, rb;          // write half, read half
  logic [NW-1:0] wa;              // write address
  logic [1:0]    full;            // half holds an unread frame
  logic          reading;
  logic [NW-1:0] rcnt;            // read step: channel = rcnt/2, phase = rcnt[0]
  logic [NW-2:0] rk;
  logic [NW-1:0] raddr;

  assign rk    = rcnt[NW-1:1];
  assign raddr = rcnt[0] ? NW'(FFT_N) - NW'(rk) : NW'(rk);   // wraps N-0 to 0

  always_ff @(posedge clk) begin
    if (in_valid) mem[{wb, wa}] <= {in_re, in_im};
  end

  // read pipeline
  logic               r_v, r_ph, r_last;
  logic [NW-2:0]      r_k;
  logic [2*FFT_W-1:0] r_data;
  logic signed [FFT_W-1:0] zk_re, zk_im;

  logic start_read, end_read, frame_in;
  assign start_read = !reading && full[rb];
  assign end_read   = reading && (rcnt == NW'(FFT_N - 1));
  assign frame_in   = in_valid && (wa == NW'(FFT_N - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb <= 1'b0; rb <= 1'b0; wa <= '0; full <= '0;
      reading <= 1'b0; rcnt <= '0; overrun <= 1'b0;
      r_v <= 1'b0; r_ph <= 1'b0; r_last <= 1'b0; r_k <= '0; r_data <= '0;
      zk_re <= '0; zk_im <= '0;
      out_valid <= 1'b0; out_chan <= '0; out_last <= 1'b0; out_dec <= '0;
    end else begin
      // write side
      if (in_valid) begin
        wa <= wa + 1'b1;
        // a half is free again in the clock its last channel is read; the
        // write to address 0 in that clock does not meet the read
        if (wa == '0 && full[wb] && !(end_read && rb == wb)) overrun <= 1'b1;
        if (frame_in) wb <= ~wb;
      end
      // frame bookkeeping
      for (int h = 0; h < 2; h++) begin
        if (frame_in && wb == h[0])                 full[h] <= 1'b1;
        else if (end_read && rb == h[0])            full[h] <= 1'b0;
      end
      // read side
      // the next frame follows without a gap if it is already complete
      if (start_read) begin
        reading <= 1'b1;
        rcnt    <= '0;
      end else if (end_read) begin
        rb      <= ~rb;
        rcnt    <= '0;
        reading <= full[~rb] || (frame_in && wb == ~rb);
      end else if (reading) begin
        rcnt <= rcnt + 1'b1;
      end
      r_v    <= reading;
      r_ph   <= rcnt[0];
      r_k    <= rk;
      r_last <= (rk == (NW - 1)'(FFT_N / 2 - 1));
      r_data <= mem[{rb, raddr}];
      // decode
      out_valid <= 1'b0;
      if (r_v && !r_ph) begin
        zk_re <= r_data[2*FFT_W-1:FFT_W];
        zk_im <= r_data[FFT_W-1:0];
      end
      if (r_v && r_ph) begin
        out_valid  <= 1'b1;
        out_chan   <= r_k;
        out_last   <= r_last;
        out_dec.rr <= DEC_W'(zk_re) + DEC_W'($signed(r_data[2*FFT_W-1:FFT_W]));
        out_dec.ri <= DEC_W'(zk_im) - DEC_W'($signed(r_data[FFT_W-1:0]));
        out_dec.lr <= DEC_W'(zk_im) + DEC_W'($signed(r_data[FFT_W-1:0]));
        out_dec.li <= DEC_W'($signed(r_data[2*FFT_W-1:FFT_W])) - DEC_W'(zk_re);
      end
    end
  end

endmodule
