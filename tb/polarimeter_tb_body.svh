// Body shared by the end-to-end testbenches of polarimeter_top. The module
// that includes it declares the localparams T_FFT_N, T_N_INT, T_LANES,
// T_MODULES, T_SWITCH, RUN_INTS (integrations checked per run) and
// TWO_RUNS, and instantiates polarimeter_top as `dut` with the signals
// declared here.
//
// Run A: all lanes on, out_shift chosen so that nothing clips. Run B (after
// a reset, if TWO_RUNS): the last lane of every module switched off,
// out_shift = 0 and a large constant added to the input, so that output
// words saturate. Each run feeds random 8-bit
// ADC data until every module has output RUN_INTS integrations, and a
// scoreboard per module checks every output word against spectra computed
// from the FFT outputs alone. Mechanisms counted: frames to each module,
// cal switching with data blanking, integration dumps, dropped frames of a
// switched-off lane, saturated output words.

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic adc_valid;
  field_t adc_field;
  logic [T_MODULES-1:0][T_LANES-1:0] lane_en;
  logic [5:0] out_shift;
  logic [T_MODULES-1:0][T_LANES-1:0] fft_in_valid, fft_in_sof, fft_out_valid;
  logic [T_MODULES-1:0][T_LANES-1:0][7:0] fft_in_re, fft_in_im;
  logic [T_MODULES-1:0][T_LANES-1:0][20:0] fft_out_re, fft_out_im;
  logic [T_MODULES-1:0] spec_valid, spec_last;
  logic [T_MODULES-1:0][$clog2(T_FFT_N)-2:0] spec_chan;
  spec_t [T_MODULES-1:0] spec_data;
  logic [T_MODULES-1:0][15:0] spec_index;
  logic cal_on;
  logic [15:0] int_index, blank_count;
  logic [T_MODULES-1:0][T_LANES-1:0] fifo_overflow, decode_overrun, acc_overrun;
  logic [T_MODULES-1:0][31:0] frames_dropped, sat_count;

  int checks = 0, failures = 0;
  int r_checks [T_MODULES], r_fail [T_MODULES], r_ints [T_MODULES], r_sat [T_MODULES];

  always #4 clk = ~clk;   // 125 MHz

  for (genvar m = 0; m < T_MODULES; m++) begin : g_m
    for (genvar l = 0; l < T_LANES; l++) begin : g_l
      fft_model #(.FFT_N(T_FFT_N)) u_fft (
        .clk, .rst_n, .in_valid(fft_in_valid[m][l]), .in_sof(fft_in_sof[m][l]),
        .in_re(fft_in_re[m][l]), .in_im(fft_in_im[m][l]),
        .out_valid(fft_out_valid[m][l]), .out_re(fft_out_re[m][l]), .out_im(fft_out_im[m][l])
      );
    end
    spectra_ref #(.FFT_N(T_FFT_N), .N_INT(T_N_INT), .LANES(T_LANES)) u_ref (
      .clk, .rst_n, .out_shift,
      .fft_valid(fft_out_valid[m]), .fft_re(fft_out_re[m]), .fft_im(fft_out_im[m]),
      .spec_valid(spec_valid[m]), .spec_chan(spec_chan[m]), .spec_last(spec_last[m]),
      .spec_data(spec_data[m]), .spec_index(spec_index[m]),
      .checks(r_checks[m]), .failures(r_fail[m]), .integrations(r_ints[m]), .sat_words(r_sat[m])
    );
  end

  // ADC: one field of random samples every clock; in run B a loud_dc
  // constant offset on both hands is added so that the DC channel clips
  bit loud_dc = 1'b0;
  always_ff @(posedge clk) begin
    adc_valid <= rst_n;
    for (int j = 0; j < 8; j++) begin
      adc_field.r[j] <= loud_dc ? 8'(120 + $urandom_range(7)) : 8'($urandom);
      adc_field.l[j] <= loud_dc ? 8'(120 + $urandom_range(7)) : 8'($urandom);
    end
  end

  // mechanism counters
  int n_cal_toggles = 0, n_blank_clocks = 0, n_mod_frames [T_MODULES];
  logic cal_q = 1'b0;
  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (cal_on != cal_q) n_cal_toggles++;
      if (!dut.u_adc_fpga.u_cal.win_enable) n_blank_clocks++;
      for (int m = 0; m < T_MODULES; m++)
        if (dut.mod_valid[m] && dut.mod_sof) n_mod_frames[m]++;
    end
    cal_q <= cal_on;
  end

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endfunction

  int tot_ints = 0, tot_sat = 0, tot_drop = 0, tot_dumps = 0;

  task automatic run(bit disable_lane, logic [5:0] shift);
    int ints;
    rst_n = 1'b0;
    lane_en = '1;
    if (disable_lane)
      for (int m = 0; m < T_MODULES; m++) lane_en[m][T_LANES-1] = 1'b0;
    out_shift = shift;
    loud_dc = disable_lane;
    for (int m = 0; m < T_MODULES; m++) n_mod_frames[m] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    forever begin
      @(posedge clk);
      ints = RUN_INTS;
      for (int m = 0; m < T_MODULES; m++) if (r_ints[m] < ints) ints = r_ints[m];
      if (ints >= RUN_INTS) break;
    end
    repeat (4) @(posedge clk);
    for (int m = 0; m < T_MODULES; m++) begin
      checks   += r_checks[m];
      failures += r_fail[m];
      tot_sat  += r_sat[m];
      tot_dumps += r_ints[m];
      check(r_checks[m] == RUN_INTS * (T_FFT_N / 2), $sformatf("module %0d output %0d words", m, r_checks[m]));
      check(sat_count[m] == 32'(r_sat[m]), $sformatf("module %0d sat_count %0d, expected %0d", m, sat_count[m], r_sat[m]));
      check(fifo_overflow[m] == '0 && decode_overrun[m] == '0 && acc_overrun[m] == '0,
            $sformatf("module %0d error flags fifo %b decode %b acc %b", m,
                      fifo_overflow[m], decode_overrun[m], acc_overrun[m]));
      check(n_mod_frames[m] > 0, $sformatf("module %0d received no frames", m));
      if (disable_lane) begin
        check(frames_dropped[m] > 0, "no frame dropped for the disabled lane");
        tot_drop += frames_dropped[m];
      end else
        check(frames_dropped[m] == 0, "frames dropped with all lanes on");
    end
    check(int_index >= 16'(RUN_INTS), "integration counter");
    check(cal_on == int_index[0], "cal state follows the integration count");
    check(blank_count >= 16'(RUN_INTS - 1), "blanking periods");
    tot_ints += RUN_INTS;
  endtask

  initial begin
    run(1'b0, 6'd12);
    if (TWO_RUNS) run(1'b1, 6'd0);
    // every mechanism must have happened at least once
    $display("mechanisms: cal_toggles=%0d blank_clocks=%0d dumps=%0d dropped_frames=%0d saturated_words=%0d",
             n_cal_toggles, n_blank_clocks, tot_dumps, tot_drop, tot_sat);
    check(n_cal_toggles > 0, "cal switching never happened");
    check(n_blank_clocks > 0, "blanking never happened");
    check(tot_dumps > 0, "no integration was output");
    if (TWO_RUNS) begin
      check(tot_drop > 0, "no frame was dropped");
      check(tot_sat > 0, "no output word saturated");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'(WATCHDOG_NS));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
