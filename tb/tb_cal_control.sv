// tb_cal_control: a window model ends a frame every third clock while
// win_enable is high. With 5 frames per integration and 7 switching clocks
// the test checks that exactly 5 frames make an integration, that cal_on
// toggles as each integration ends, that win_enable stays low for exactly
// 7 clocks, and the integration and blanking counters.
module tb_cal_control;
  localparam int unsigned FPI = 5, SW = 7;
  logic clk = 1'b0, rst_n = 1'b0;
  logic frame_done, win_enable, cal_on;
  logic [15:0] int_index, blank_count;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  cal_control #(.FRAMES_PER_INT(FPI), .SWITCH_CYCLES(SW)) dut (.*);

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  int phase = 0;           // clocks into the current frame
  int frames = 0, low_run = 0, ints = 0;
  bit exp_cal = 0;

  always @(negedge clk) if (rst_n) begin
    // the frame ending in this clock is taken if win_enable is high
    frame_done = 1'b0;
    if (win_enable) begin
      if (low_run != 0) begin
        check(low_run == SW, $sformatf("blanking lasted %0d clocks", low_run));
        low_run = 0;
      end
      phase++;
      if (phase == 3) begin
        phase = 0;
        frame_done = 1'b1;
      end
    end else begin
      low_run++;
      phase = 0;
    end
  end

  always @(posedge clk) if (rst_n) begin
    bit fd;
    fd = frame_done;       // driven at the previous falling edge
    #1;
    if (fd) begin
      frames++;
      if (frames == FPI) begin
        frames = 0;
        ints++;
        exp_cal = !exp_cal;
        check(!win_enable, "win_enable low after the last frame");
        check(int_index == 16'(ints), "int_index");
      end
    end
    check(cal_on == exp_cal, "cal_on");
  end

  initial begin
    frame_done = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (400) @(posedge clk);
    check(ints >= 8, "integrations completed");
    check(blank_count >= 16'(ints - 1), "blanking counter");
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
