// spectra_ref: scoreboard for the integrated spectra of one FPGA module.
//
// It watches the FFT outputs of the module's lanes, and from them alone
// computes what the module must produce: for each frame of lane l the R and
// L spectra (2 X_R[k] = Z[k] + conj Z[N-k], 2 X_L[k] = -j (Z[k] - conj
// Z[N-k])), the products RR, LL, Re(R L*), Im(R L*), their sum over the
// N_INT frames of an integration and over the lanes, then the right shift
// and the saturation to 32 bits. Frame f of a lane belongs to integration
// f / N_INT. Every output word of the module is compared with this.
module spectra_ref #(
  parameter int unsigned FFT_N = 64,
  parameter int unsigned N_INT = 2,
  parameter int unsigned LANES = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [5:0]                 out_shift,
  input  logic [LANES-1:0]           fft_valid,
  input  logic [LANES-1:0][20:0]     fft_re,
  input  logic [LANES-1:0][20:0]     fft_im,
  input  logic                       spec_valid,
  input  logic [$clog2(FFT_N)-2:0]   spec_chan,
  input  logic                       spec_last,
  input  logic [127:0]               spec_data,
  input  logic [15:0]                spec_index,
  output int                         checks,
  output int                         failures,
  output int                         integrations,
  output int                         sat_words
);
  localparam int unsigned N_CH = FFT_N / 2;

  longint zr [LANES][FFT_N];
  longint zi [LANES][FFT_N];
  int     zc [LANES];
  int     frames [LANES];
  longint e_rr [longint];
  longint e_ll [longint];
  longint e_rl [longint];
  longint e_lr [longint];

  function automatic longint sat32(longint v, int sh, ref int nsat);
    longint t = v >>> sh;
    if (t > 64'sd2147483647)  begin nsat++; return 64'sd2147483647; end
    if (t < -64'sd2147483648) begin nsat++; return -64'sd2147483648; end
    return t;
  endfunction

  task automatic add_frame(int l);
    longint key0 = longint'(frames[l] / N_INT) * N_CH;
    for (int k = 0; k < N_CH; k++) begin
      int     m = (FFT_N - k) % FFT_N;
      longint rr = zr[l][k] + zr[l][m];
      longint ri = zi[l][k] - zi[l][m];
      longint lr = zi[l][k] + zi[l][m];
      longint li = zr[l][m] - zr[l][k];
      longint key = key0 + k;
      if (!e_rr.exists(key)) begin e_rr[key] = 0; e_ll[key] = 0; e_rl[key] = 0; e_lr[key] = 0; end
      e_rr[key] += rr * rr + ri * ri;
      e_ll[key] += lr * lr + li * li;
      e_rl[key] += rr * lr + ri * li;
      e_lr[key] += ri * lr - rr * li;
    end
    frames[l]++;
  endtask

  always @(posedge clk) begin
    if (!rst_n) begin
      for (int l = 0; l < LANES; l++) begin zc[l] = 0; frames[l] = 0; end
      e_rr.delete(); e_ll.delete(); e_rl.delete(); e_lr.delete();
      checks = 0; failures = 0; integrations = 0; sat_words = 0;
    end else begin
      for (int l = 0; l < LANES; l++)
        if (fft_valid[l]) begin
          zr[l][zc[l]] = longint'($signed(fft_re[l]));
          zi[l][zc[l]] = longint'($signed(fft_im[l]));
          zc[l]++;
          if (zc[l] == FFT_N) begin
            zc[l] = 0;
            add_frame(l);
          end
        end
      if (spec_valid) begin
        longint key;
        longint got [4];
        longint exp_v [4];
        key = longint'(spec_index) * N_CH + spec_chan;
        // output word: RR, RL, LR, LL from the most significant end
        got[0] = longint'($signed(spec_data[127:96]));
        got[1] = longint'($signed(spec_data[95:64]));
        got[2] = longint'($signed(spec_data[63:32]));
        got[3] = longint'($signed(spec_data[31:0]));
        checks++;
        if (!e_rr.exists(key)) begin
          failures++;
          $display("spectra_ref: unexpected output integration %0d channel %0d", spec_index, spec_chan);
        end else begin
          exp_v[0] = sat32(e_rr[key], int'(out_shift), sat_words);
          exp_v[1] = sat32(e_rl[key], int'(out_shift), sat_words);
          exp_v[2] = sat32(e_lr[key], int'(out_shift), sat_words);
          exp_v[3] = sat32(e_ll[key], int'(out_shift), sat_words);
          if (got != exp_v) begin
            failures++;
            if (failures < 10)
              $display("spectra_ref: integration %0d channel %0d got %0d %0d %0d %0d expected %0d %0d %0d %0d",
                       spec_index, spec_chan, got[0], got[1], got[2], got[3],
                       exp_v[0], exp_v[1], exp_v[2], exp_v[3]);
          end
          e_rr.delete(key); e_ll.delete(key); e_rl.delete(key); e_lr.delete(key);
        end
        if (spec_last) integrations++;
      end
    end
  end

endmodule
