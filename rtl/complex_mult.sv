// complex_mult: the four correlation products of one frequency channel.
//
// From the decoded spectra R = Rr + j Ri and L = Lr + j Li of a channel it
// forms
//   RR = Rr^2 + Ri^2          LL = Lr^2 + Li^2
//   RL = Re(R L*) = Rr Lr + Ri Li
//   LR = Im(R L*) = Ri Lr - Rr Li
// in 44-bit two's complement. Eight 22x22 multipliers work in the first
// pipeline stage and four adders in the second, so results leave two clocks
// after their inputs; channel number and last flag travel alongside.
//
// The 44-bit sums cannot overflow in this instrument: with 8-bit input and a
// window peak of one, |2 X| stays below 2^20, so each product is below 2^40.
//
// From the paper: the products RR, LL, RL, LR with RL and LR the real and
// imaginary parts of the cross product, and the 22- and 44-bit widths. The
// two-stage pipeline is this design's own.
module complex_mult
  import polarimeter_pkg::*;
#(
  parameter int unsigned CW = 11   // channel number width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [CW-1:0] in_chan,
  input  logic          in_last,
  input  dec_t          in_dec,
  output logic          out_valid,
  output logic [CW-1:0] out_chan,
  output logic          out_last,
  output prod_t         out_prod
);
  typedef logic signed [PROD_W-1:0] p_t;

  p_t            m_rr, m_ri, m_lr, m_li, m_x1, m_x2, m_x3, m_x4;
  logic          s_valid, s_last;
  logic [CW-1:0] s_chan;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {m_rr, m_ri, m_lr, m_li, m_x1, m_x2, m_x3, m_x4} <= '0;
      s_valid <= 1'b0; s_last <= 1'b0; s_chan <= '0;
      out_valid <= 1'b0; out_last <= 1'b0; out_chan <= '0; out_prod <= '0;
    end else begin
      s_valid <= in_valid;
      s_last  <= in_last;
      s_chan  <= in_chan;
      m_rr <= in_dec.rr * in_dec.rr;
      m_ri <= in_dec.ri * in_dec.ri;
      m_lr <= in_dec.lr * in_dec.lr;
      m_li <= in_dec.li * in_dec.li;
      m_x1 <= in_dec.rr * in_dec.lr;
      m_x2 <= in_dec.ri * in_dec.li;
      m_x3 <= in_dec.ri * in_dec.lr;
      m_x4 <= in_dec.rr * in_dec.li;

      out_valid   <= s_valid;
      out_last    <= s_last;
      out_chan    <= s_chan;
      out_prod.rr <= m_rr + m_ri;
      out_prod.ll <= m_lr + m_li;
      out_prod.rl <= m_x1 + m_x2;
      out_prod.lr <= m_x3 - m_x4;
    end
  end

endmodule
