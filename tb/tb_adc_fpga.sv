// tb_adc_fpga: the ADC-module FPGA with FFT_N = 64 (8 fields per frame),
// 4 frames per integration and a 10-clock switching time, fed a random
// field every clock. Each frame that leaves is matched against the logged
// ADC fields weighted with the Blackman-Harris coefficients computed here.
// Checks: frames alternate between the two modules; within an integration
// frames are made of consecutive ADC fields; between integrations at least
// the switching time of data is discarded; cal_on toggles once per
// integration.
module tb_adc_fpga;
  import polarimeter_pkg::*;
  localparam int unsigned N = 64, P = N / FIELD, FPI = 4, SW = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  logic adc_valid, mod_sof, mod_eof, cal_on;
  field_t adc_field, mod_field;
  logic [1:0] mod_valid;
  logic [15:0] int_index, blank_count;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  adc_fpga #(.FFT_N(N), .MODULES(2), .FRAMES_PER_INT(FPI), .SWITCH_CYCLES(SW)) dut (.*);

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  function automatic int coef(int n);
    real x = 2.0 * 3.14159265358979323846 * n / N;
    real w = 0.35875 - 0.48829 * $cos(x) + 0.14128 * $cos(2.0 * x) - 0.01168 * $cos(3.0 * x);
    return $rtoi(w * 65535.0 + 0.5);
  endfunction

  function automatic logic [7:0] weigh(logic [7:0] x, int w);
    longint p;
    p = longint'($signed(x)) * w + 32768;
    return 8'(p >>> 16);
  endfunction

  field_t in_log [$];
  field_t fr [P];
  int fpos = 0, frames = 0, next_idx = 0, cal_toggles = 0, fr_mod;
  logic cal_q = 0;

  always @(posedge clk) if (rst_n) begin
    if (cal_on != cal_q) cal_toggles++;
    cal_q = cal_on;
    if (adc_valid) in_log.push_back(adc_field);
    if (mod_valid != '0) begin
      if (fpos == 0) begin
        fr_mod = (mod_valid == 2'b01) ? 0 : (mod_valid == 2'b10) ? 1 : -1;
        check(mod_sof, "sof on first field");
        check(fr_mod == frames % 2, $sformatf("frame %0d went to module %0d", frames, fr_mod));
      end
      fr[fpos] = mod_field;
      fpos++;
      if (fpos == P) begin
        int s, gap;
        bit found;
        check(mod_eof, "eof on last field");
        fpos = 0;
        found = 0;
        for (s = next_idx; s + P <= in_log.size(); s++) begin
          bit ok;
          ok = 1;
          for (int p = 0; p < P && ok; p++)
            for (int j = 0; j < FIELD; j++)
              if (fr[p].r[j] != weigh(in_log[s+p].r[j], coef(p * FIELD + j)) ||
                  fr[p].l[j] != weigh(in_log[s+p].l[j], coef(p * FIELD + j))) ok = 0;
          if (ok) begin found = 1; break; end
        end
        check(found, $sformatf("frame %0d matches the weighted ADC data", frames));
        gap = s - next_idx;
        if (frames % FPI == 0 && frames > 0)
          check(gap >= SW && gap <= SW + P, $sformatf("gap %0d between integrations", gap));
        else if (frames > 0)
          check(gap == 0, $sformatf("gap %0d inside an integration", gap));
        next_idx = s + P;
        frames++;
      end
    end
  end

  always @(negedge clk) begin
    adc_valid = rst_n;
    for (int j = 0; j < FIELD; j++) begin
      adc_field.r[j] = 8'($urandom);
      adc_field.l[j] = 8'($urandom);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (600) @(posedge clk);
    check(frames >= 3 * FPI, $sformatf("%0d frames", frames));
    check(cal_toggles == int'(int_index) && cal_toggles >= 3, "cal toggles per integration");
    check(blank_count >= 16'(cal_toggles - 1), "blanking count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
