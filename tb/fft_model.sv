// fft_model: behavioural model of the FFT core of one lane (vendor IP, not
// part of the RTL).
//
// It collects FFT_N complex input pairs (R as real, L as imaginary part),
// framed by in_sof, computes the unscaled forward DFT
//   Z[k] = sum_n x[n] exp(-2 pi j n k / FFT_N)
// in double precision with an iterative radix-2 FFT, rounds to the nearest
// integer and streams the FFT_N results out in natural order, one per
// clock, starting the clock after the last input. Frames may arrive back
// to back. The 21-bit output holds any 8-bit input frame without overflow.
module fft_model #(
  parameter int unsigned FFT_N = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        in_sof,
  input  logic [7:0]  in_re,
  input  logic [7:0]  in_im,
  output logic        out_valid,
  output logic [20:0] out_re,
  output logic [20:0] out_im
);
  localparam int LOGN = $clog2(FFT_N);

  real   xr [FFT_N];
  real   xi [FFT_N];
  int    cnt;
  int    q_re [$];
  int    q_im [$];
  real   twr [FFT_N/2];
  real   twi [FFT_N/2];

  initial
    for (int k = 0; k < FFT_N / 2; k++) begin
      twr[k] = $cos(-2.0 * 3.14159265358979323846 * k / FFT_N);
      twi[k] = $sin(-2.0 * 3.14159265358979323846 * k / FFT_N);
    end

  function automatic int rnd(real v);
    return (v >= 0.0) ? $rtoi(v + 0.5) : -$rtoi(-v + 0.5);
  endfunction

  function automatic int bitrev(int v);
    int r = 0;
    for (int b = 0; b < LOGN; b++) r |= ((v >> b) & 1) << (LOGN - 1 - b);
    return r;
  endfunction

  task automatic transform();
    real ar [FFT_N];
    real ai [FFT_N];
    for (int n = 0; n < FFT_N; n++) begin
      ar[bitrev(n)] = xr[n];
      ai[bitrev(n)] = xi[n];
    end
    for (int len = 2; len <= FFT_N; len *= 2) begin
      for (int s = 0; s < FFT_N; s += len) begin
        for (int k = 0; k < len / 2; k++) begin
          real wr, wi, tr, ti;
          wr = twr[k * (FFT_N / len)];
          wi = twi[k * (FFT_N / len)];
          tr = ar[s+k+len/2] * wr - ai[s+k+len/2] * wi;
          ti = ar[s+k+len/2] * wi + ai[s+k+len/2] * wr;
          ar[s+k+len/2] = ar[s+k] - tr;
          ai[s+k+len/2] = ai[s+k] - ti;
          ar[s+k] = ar[s+k] + tr;
          ai[s+k] = ai[s+k] + ti;
        end
      end
    end
    for (int k = 0; k < FFT_N; k++) begin
      q_re.push_back(rnd(ar[k]));
      q_im.push_back(rnd(ai[k]));
    end
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= 0;
      q_re.delete();
      q_im.delete();
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= 1'b0;
      if (q_re.size() > 0) begin
        out_valid <= 1'b1;
        out_re    <= 21'(q_re.pop_front());
        out_im    <= 21'(q_im.pop_front());
      end
      if (in_valid) begin
        automatic int idx = in_sof ? 0 : cnt;
        xr[idx] = real'($signed(in_re));
        xi[idx] = real'($signed(in_im));
        cnt <= idx + 1;
        if (idx == FFT_N - 1) begin
          transform();
          cnt <= 0;
        end
      end
    end
  end

endmodule
