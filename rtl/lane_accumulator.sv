// lane_accumulator: integrates the power spectra of one FFT lane.
//
// For every channel the four products RR, LL, RL, LR of N_INT consecutive
// spectra are summed in 54-bit accumulators (44-bit products, and up to
// 1024 spectra, cover the 760 spectra of the instrument's 25 ms
// integration). The accumulator memory has two halves: one integrates while
// the other holds the previous integration until the lane combiner has read
// it. The first spectrum of an integration is written rather than added, so
// no clearing pass is needed, and the halves swap as the last channel of the
// last spectrum is taken.
//
// Pipeline: a product is read-modified-written over two clocks (read in the
// clock it arrives, written in the next). Products of one spectrum have
// distinct channel numbers, so no read meets a pending write to the same
// address.
//
// Interface: in_valid/in_chan/in_last/in_prod from the complex multiplier.
// hold_valid rises when a finished integration is ready and falls on
// hold_ack. rd_addr/rd_data read the held half with one clock of latency.
// `overrun` is sticky: a new integration finished before the old one was
// acknowledged.
//
// From the paper: per-lane summation of 760 spectra, the 54-bit internal
// precision. The double-buffered memory and the handshake are this design's
// own.
module lane_accumulator
  import polarimeter_pkg::*;
#(
  parameter int unsigned FFT_N = FFT_N_DEF,
  parameter int unsigned N_INT = N_INT_DEF
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [$clog2(FFT_N)-2:0] in_chan,
  input  logic          in_last,
  input  prod_t         in_prod,
  output logic          hold_valid,
  input  logic          hold_ack,
  input  logic [$clog2(FFT_N)-2:0] rd_addr,
  output acc_t          rd_data,
  output logic          overrun
);
  localparam int unsigned N_CH = FFT_N / 2;
  localparam int unsigned CW   = $clog2(FFT_N) - 1;
  localparam int unsigned IW   = $clog2(N_INT + 1);

  acc_t          mem [2*N_CH];
  logic          ab;               // half being integrated
  logic [IW-1:0] spec_cnt;

  // stage 1 registers
  logic          s_valid, s_first;
  logic [CW:0]   s_addr;
  prod_t         s_prod;
  acc_t          s_old;

  function automatic acc_t widen(prod_t p);
    acc_t a;
    a.rr = ACC_W'(p.rr);
    a.ll = ACC_W'(p.ll);
    a.rl = ACC_W'(p.rl);
    a.lr = ACC_W'(p.lr);
    return a;
  endfunction

  function automatic acc_t add(acc_t a, acc_t b);
    acc_t s;
    s.rr = a.rr + b.rr;
    s.ll = a.ll + b.ll;
    s.rl = a.rl + b.rl;
    s.lr = a.lr + b.lr;
    return s;
  endfunction

  always_ff @(posedge clk) begin
    s_old   <= mem[{ab, in_chan}];
    rd_data <= mem[{~ab, rd_addr}];
    if (s_valid) mem[s_addr] <= s_first ? widen(s_prod) : add(s_old, widen(s_prod));
  end

  logic swap;
  assign swap = in_valid && in_last && (spec_cnt == IW'(N_INT - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ab <= 1'b0; spec_cnt <= '0;
      s_valid <= 1'b0; s_first <= 1'b0; s_addr <= '0; s_prod <= '0;
      hold_valid <= 1'b0; overrun <= 1'b0;
    end else begin
      s_valid <= in_valid;
      s_first <= (spec_cnt == '0);
      s_addr  <= {ab, in_chan};
      s_prod  <= in_prod;
      if (in_valid && in_last)
        spec_cnt <= swap ? '0 : spec_cnt + 1'b1;
      if (swap) begin
        ab         <= ~ab;
        hold_valid <= 1'b1;
        if (hold_valid && !hold_ack) overrun <= 1'b1;
      end else if (hold_ack) begin
        hold_valid <= 1'b0;
      end
    end
  end

  // Handshake rule: an integration is acknowledged only while one is held.
  assert property (@(posedge clk) disable iff (!rst_n) hold_ack |-> hold_valid);

endmodule
