// tb_bh_window: random ADC fields through the window at FFT_N = 64.
// Checks every weighted sample against w(n) = 0.35875 - 0.48829 cos(2 pi n/N)
// + 0.14128 cos(4 pi n/N) - 0.01168 cos(6 pi n/N), quantised to 16 bits,
// the frame markers, the one-clock latency, and that frames start only
// while enable is high but always run to their end.
module tb_bh_window;
  import polarimeter_pkg::*;
  localparam int unsigned N = 64;
  localparam int unsigned P = N / FIELD;
  logic clk = 1'b0, rst_n = 1'b0;
  logic enable, in_valid, last_accept, out_valid, out_sof, out_eof;
  field_t in_field, out_field;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  bh_window #(.FFT_N(N)) dut (.*);

  function automatic int coef(int n);
    real x = 2.0 * 3.14159265358979323846 * n / N;
    real w = 0.35875 - 0.48829 * $cos(x) + 0.14128 * $cos(2.0 * x) - 0.01168 * $cos(3.0 * x);
    return $rtoi(w * 65535.0 + 0.5);
  endfunction

  function automatic int weigh(int x, int w);
    longint p = longint'(x) * w + 32768;
    return int'(p >>> 16);
  endfunction

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  int pos_model = 0;      // position in the frame of the next field taken
  bit act_model = 0;
  int frames_out = 0, fields_discarded = 0;
  // expected output of the field taken in the previous clock
  bit e_valid = 0, e_sof = 0, e_eof = 0, e_last = 0;
  int e_r [FIELD], e_l [FIELD];

  always @(negedge clk) if (rst_n) begin
    bit take;
    check(out_valid == e_valid, "out_valid");
    if (e_valid) begin
      check(out_sof == e_sof && out_eof == e_eof, "frame markers");
      for (int j = 0; j < FIELD; j++)
        check($signed(out_field.r[j]) == e_r[j] && $signed(out_field.l[j]) == e_l[j],
              $sformatf("sample %0d", j));
      if (e_eof) frames_out++;
    end
    // drive the next field and predict
    in_valid = ($urandom_range(7) != 0);
    enable   = ($urandom_range(3) != 0);
    for (int j = 0; j < FIELD; j++) begin
      in_field.r[j] = 8'($urandom);
      in_field.l[j] = 8'($urandom);
    end
    take = in_valid && (act_model || enable);
    if (in_valid && !take) fields_discarded++;
    e_valid = take; e_sof = take && pos_model == 0; e_eof = take && pos_model == P - 1;
    #1 check(last_accept == e_eof, "last_accept");
    if (take) begin
      for (int j = 0; j < FIELD; j++) begin
        e_r[j] = weigh($signed(in_field.r[j]), coef(pos_model * FIELD + j));
        e_l[j] = weigh($signed(in_field.l[j]), coef(pos_model * FIELD + j));
      end
      if (pos_model == P - 1) begin pos_model = 0; act_model = 0; end
      else begin pos_model++; act_model = 1; end
    end
  end

  initial begin
    in_valid = 0; enable = 0; in_field = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (3000) @(posedge clk);
    check(frames_out > 20, "frames produced");
    check(fields_discarded > 20, "fields discarded while disabled");
    // window shape: peak of one in the middle, near zero at the ends
    check(dut.rom[0][P/2] == 16'hFFFF, "window peak");
    check(dut.rom[0][0] < 16'd8, "window edge");
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
