// tb_fpga_module: one FPGA module with FFT_N = 64, N_INT = 2 and four lanes
// around behavioural FFT cores, fed frames of random windowed data at the
// full rate (one frame every FFT_N/4 clocks). A scoreboard recomputes the
// integrated spectra from the FFT outputs. Run 1 has all lanes on; run 2,
// after a reset, switches lane 2 off. Checks every output word, the number
// of integrations, the dropped-frame count and the error flags. A monitor
// also checks that every lane's FFT input carries the R samples of its
// frames in the real part and the L samples in the imaginary part, in order.
module tb_fpga_module;
  import polarimeter_pkg::*;
  localparam int unsigned N = 64, NI = 2, L = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [L-1:0] lane_en;
  logic [5:0] out_shift;
  logic in_valid, in_sof, in_eof;
  field_t in_field;
  logic [L-1:0] fft_in_valid, fft_in_sof, fft_out_valid;
  logic [L-1:0][7:0] fft_in_re, fft_in_im;
  logic [L-1:0][20:0] fft_out_re, fft_out_im;
  logic out_valid, out_last;
  logic [4:0] out_chan;
  spec_t out_spec;
  logic [15:0] out_index;
  logic [L-1:0] fifo_overflow, decode_overrun, acc_overrun;
  logic [31:0] frames_dropped, sat_count;
  int checks = 0, failures = 0;
  int r_checks, r_fail, r_ints, r_sat;

  always #4 clk = ~clk;

  // expected FFT input words per lane: {R, L}
  logic [15:0] exp_in[L][$];
  int in_checks = 0, in_fail = 0;

  always @(posedge clk)
    for (int l = 0; l < L; l++)
      if (rst_n && fft_in_valid[l]) begin
        in_checks++;
        if (exp_in[l].size() == 0) begin
          in_fail++;
          $display("FAIL: lane %0d FFT input with nothing expected", l);
        end else begin
          logic [15:0] e;
          e = exp_in[l].pop_front();
          if ({fft_in_re[l], fft_in_im[l]} !== e) begin
            in_fail++;
            if (in_fail < 5)
              $display("FAIL: lane %0d FFT input %h/%h, expected %h/%h", l,
                       fft_in_re[l], fft_in_im[l], e[15:8], e[7:0]);
          end
        end
      end

  fpga_module #(.FFT_N(N), .N_INT(NI), .LANES(L)) dut (.*);

  for (genvar l = 0; l < L; l++) begin : g_fft
    fft_model #(.FFT_N(N)) u_fft (
      .clk, .rst_n, .in_valid(fft_in_valid[l]), .in_sof(fft_in_sof[l]),
      .in_re(fft_in_re[l]), .in_im(fft_in_im[l]),
      .out_valid(fft_out_valid[l]), .out_re(fft_out_re[l]), .out_im(fft_out_im[l]));
  end

  spectra_ref #(.FFT_N(N), .N_INT(NI), .LANES(L)) u_ref (
    .clk, .rst_n, .out_shift, .fft_valid(fft_out_valid), .fft_re(fft_out_re), .fft_im(fft_out_im),
    .spec_valid(out_valid), .spec_chan(out_chan), .spec_last(out_last), .spec_data(out_spec),
    .spec_index(out_index), .checks(r_checks), .failures(r_fail), .integrations(r_ints), .sat_words(r_sat));

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  task automatic run(logic [L-1:0] en, int n_frames);
    rst_n = 0; lane_en = en; out_shift = 6'd4;
    in_valid = 0; in_sof = 0; in_eof = 0; in_field = '0;
    for (int l = 0; l < L; l++) exp_in[l].delete();
    in_checks = 0; in_fail = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int f = 0; f < n_frames; f++) begin
      for (int w = 0; w < N / FIELD; w++) begin
        @(negedge clk);
        in_valid = 1; in_sof = (w == 0); in_eof = (w == N / FIELD - 1);
        for (int j = 0; j < FIELD; j++) begin
          in_field.r[j] = 8'($urandom);
          in_field.l[j] = 8'($urandom);
          if (en[f % L]) exp_in[f % L].push_back({in_field.r[j], in_field.l[j]});
        end
      end
      @(negedge clk) in_valid = 0;
      repeat (N / 8 - 1) @(negedge clk);
    end
    repeat (4 * N) @(negedge clk);
    checks += r_checks + in_checks;
    failures += r_fail + in_fail;
    check(in_checks == $countones(en) * (n_frames / L) * N, $sformatf("%0d FFT input words", in_checks));
    check(r_ints == n_frames / (L * NI), $sformatf("%0d integrations out", r_ints));
    check(r_checks == r_ints * N / 2, "words out");
    check(fifo_overflow == '0 && decode_overrun == '0 && acc_overrun == '0, "error flags");
    check(frames_dropped == 32'((n_frames / L) * (L - $countones(en))), $sformatf("%0d frames dropped", frames_dropped));
  endtask

  initial begin
    run(4'b1111, 3 * L * NI);
    run(4'b1011, 3 * L * NI);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
