// lane_combiner: the final summation of one FPGA module.
//
// When every enabled lane holds a finished integration, the combiner reads
// channel after channel from all of them at once, adds the enabled lanes'
// 54-bit sums, shifts the total right by out_shift and saturates it to a
// 32-bit two's-complement word. The four products of each channel leave
// together, one channel per clock, and the lanes are then released with
// hold_ack. A disabled lane contributes nothing and is not waited for.
//
// Timing: rd_addr steps through channels 0..N_CH-1; the lanes answer one
// clock later; the sum is registered in the next clock and the scaled word
// in the one after, so out_valid follows rd_addr by three clocks. The read
// takes N_CH clocks and must end before a lane finishes its next
// integration, which holds whenever N_INT >= 2.
//
// Output: out_valid, out_chan, out_last on the last channel, out_spec and
// out_index, the number of the integration (0 after reset). sat_count
// counts output words that were clipped.
//
// From the paper: the final summation across lanes, 54-bit internal and
// 32-bit output precision. How 54 bits become 32 (a programmable right
// shift with saturation) is this design's choice; the paper does not say.
module lane_combiner
  import polarimeter_pkg::*;
#(
  parameter int unsigned FFT_N = FFT_N_DEF,
  parameter int unsigned LANES = LANES_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [LANES-1:0] lane_en,
  input  logic [5:0]       out_shift,
  input  logic [LANES-1:0] hold_valid,
  output logic [LANES-1:0] hold_ack,
  output logic [$clog2(FFT_N)-2:0] rd_addr,
  input  acc_t             rd_data [LANES],
  output logic             out_valid,
  output logic [$clog2(FFT_N)-2:0] out_chan,
  output logic             out_last,
  output spec_t            out_spec,
  output logic [15:0]      out_index,
  output logic [31:0]      sat_count
);
  localparam int unsigned N_CH = FFT_N / 2;
  localparam int unsigned CW   = $clog2(FFT_N) - 1;

  typedef logic signed [SUM_W-1:0] sum_t;

  logic          running;
  logic          d_v, d_last, s_v, s_last;
  logic [CW-1:0] d_chan, s_chan;
  sum_t          s_rr, s_ll, s_rl, s_lr;

  logic all_ready;
  assign all_ready = (lane_en != '0) && ((hold_valid | ~lane_en) == '1) && (hold_ack == '0);

  function automatic logic signed [OUT_W-1:0] scale(sum_t v, logic [5:0] sh, output logic sat);
    sum_t t;
    t = v >>> sh;
    sat = 1'b0;
    if (t > sum_t'((64'sd1 <<< (OUT_W - 1)) - 1)) begin
      sat = 1'b1;
      return {1'b0, {(OUT_W - 1){1'b1}}};
    end
    if (t < -sum_t'(64'sd1 <<< (OUT_W - 1))) begin
      sat = 1'b1;
      return {1'b1, {(OUT_W - 1){1'b0}}};
    end
    return OUT_W'(t);
  endfunction

  // sum over the enabled lanes, and scaling of the registered sum
  sum_t       a_rr, a_ll, a_rl, a_lr;
  spec_t      sc_spec;
  logic [3:0] sc_sat;

  always_comb begin
    a_rr = '0; a_ll = '0; a_rl = '0; a_lr = '0;
    for (int i = 0; i < LANES; i++)
      if (lane_en[i]) begin
        a_rr += SUM_W'(rd_data[i].rr);
        a_ll += SUM_W'(rd_data[i].ll);
        a_rl += SUM_W'(rd_data[i].rl);
        a_lr += SUM_W'(rd_data[i].lr);
      end
    sc_spec.rr = scale(s_rr, out_shift, sc_sat[0]);
    sc_spec.ll = scale(s_ll, out_shift, sc_sat[1]);
    sc_spec.rl = scale(s_rl, out_shift, sc_sat[2]);
    sc_spec.lr = scale(s_lr, out_shift, sc_sat[3]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; rd_addr <= '0; hold_ack <= '0;
      d_v <= 1'b0; d_last <= 1'b0; d_chan <= '0;
      s_v <= 1'b0; s_last <= 1'b0; s_chan <= '0;
      s_rr <= '0; s_ll <= '0; s_rl <= '0; s_lr <= '0;
      out_valid <= 1'b0; out_chan <= '0; out_last <= 1'b0; out_spec <= '0;
      out_index <= '0; sat_count <= '0;
    end else begin
      hold_ack <= '0;
      // address generator
      if (!running) begin
        if (all_ready) begin
          running <= 1'b1;
          rd_addr <= '0;
        end
      end else if (rd_addr == CW'(N_CH - 1)) begin
        running  <= 1'b0;
        hold_ack <= lane_en;
      end else begin
        rd_addr <= rd_addr + 1'b1;
      end
      // lane data arrive one clock after the address
      d_v    <= running;
      d_chan <= rd_addr;
      d_last <= running && (rd_addr == CW'(N_CH - 1));
      // sum over the enabled lanes
      s_v    <= d_v;
      s_chan <= d_chan;
      s_last <= d_last;
      if (d_v) begin
        s_rr <= a_rr; s_ll <= a_ll; s_rl <= a_rl; s_lr <= a_lr;
      end
      // scale to 32 bits
      out_valid <= s_v;
      out_chan  <= s_chan;
      out_last  <= s_v && s_last;
      if (s_v) begin
        out_spec  <= sc_spec;
        sat_count <= sat_count + 32'(sc_sat[0]) + 32'(sc_sat[1]) + 32'(sc_sat[2]) + 32'(sc_sat[3]);
      end
      if (out_valid && out_last) out_index <= out_index + 1'b1;
    end
  end

endmodule
