// tb_frame_fifo: FFT_N = 64 (8 fields per frame), two frames deep.
// Part 1 hands a frame every 64 clocks as a burst of 8 fields, as a lane
// receives them, and checks that the pairs leave in order, one per clock
// without gaps, with out_sof on every 64th pair and no overflow. Part 2
// writes three frames back to back, more than the FIFO holds, and checks
// that overflow is raised.
module tb_frame_fifo;
  import polarimeter_pkg::*;
  localparam int unsigned N = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, out_valid, out_sof, overflow;
  field_t in_field;
  logic [7:0] out_r, out_l;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  frame_fifo #(.FFT_N(N)) dut (.*);

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  logic [7:0] q_r [$], q_l [$];
  int n_out = 0, gaps = 0;
  bit started = 0;

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      started = 1;
      check(q_r.size() > 0, "output without input");
      if (q_r.size() > 0) begin
        check(out_r == q_r.pop_front() && out_l == q_l.pop_front(), $sformatf("pair %0d", n_out));
        check(out_sof == (n_out % N == 0), "out_sof");
      end
      n_out++;
    end else if (started && q_r.size() > 0) gaps++;
  end

  task automatic write_frame();
    for (int w = 0; w < N / FIELD; w++) begin
      @(negedge clk);
      in_valid = 1;
      for (int j = 0; j < FIELD; j++) begin
        in_field.r[j] = 8'($urandom);
        in_field.l[j] = 8'($urandom);
        q_r.push_back(in_field.r[j]);
        q_l.push_back(in_field.l[j]);
      end
    end
    @(negedge clk) in_valid = 0;
  endtask

  initial begin
    in_valid = 0; in_field = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int f = 0; f < 10; f++) begin
      write_frame();
      repeat (N - N / FIELD - 1) @(posedge clk);
    end
    repeat (2 * N) @(posedge clk);
    check(n_out == 10 * N, $sformatf("pairs out %0d", n_out));
    check(gaps == 0, $sformatf("%0d gaps in the output", gaps));
    check(!overflow, "no overflow in steady state");
    // part 2: too much at once
    for (int f = 0; f < 3; f++) write_frame();
    check(overflow, "overflow flagged");
    q_r.delete(); q_l.delete();
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
