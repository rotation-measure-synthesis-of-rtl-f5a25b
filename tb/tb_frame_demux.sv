// tb_frame_demux: 1:4 distribution of 3-field frames with gaps between
// fields. The lane enables change between frames, one lane being off at a
// time. Checks that frame f goes to output f mod 4 if it is enabled and is
// dropped otherwise, that the data are passed unchanged one clock later,
// and the dropped-frame counter.
module tb_frame_demux;
  import polarimeter_pkg::*;
  localparam int unsigned N_OUT = 4, FL = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N_OUT-1:0] out_en, out_valid;
  logic in_valid, in_sof, in_eof, out_sof, out_eof;
  field_t in_data, out_data;
  logic [31:0] frames_dropped;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  frame_demux #(.N_OUT(N_OUT)) dut (.*);

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  bit     e_v = 0, e_sof, e_eof;
  int     e_port;
  field_t e_data;
  int     dropped = 0, delivered [N_OUT];

  initial begin
    in_valid = 0; in_sof = 0; in_eof = 0; in_data = '0; out_en = '1;
    for (int i = 0; i < N_OUT; i++) delivered[i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int f = 0; f < 60; f++) begin
      int port;
      bit en;
      port = f % N_OUT;
      out_en = '1;
      if (f >= 20) out_en[(f / 7) % N_OUT] = 1'b0;
      en = out_en[port];
      if (!en) dropped++;
      for (int w = 0; w < FL; w++) begin
        while ($urandom_range(2) == 0) begin
          @(negedge clk);
          check(out_valid == (e_v ? (N_OUT'(1) << e_port) : '0), $sformatf("out_valid %b exp %0d port %0d", out_valid, e_v, e_port));
          if (e_v) check(out_data == e_data && out_sof == e_sof && out_eof == e_eof, "data");
          in_valid = 0; e_v = 0;
        end
        @(negedge clk);
        check(out_valid == (e_v ? (N_OUT'(1) << e_port) : '0), $sformatf("out_valid %b exp %0d port %0d", out_valid, e_v, e_port));
        if (e_v) check(out_data == e_data && out_sof == e_sof && out_eof == e_eof, "data");
        in_valid = 1; in_sof = (w == 0); in_eof = (w == FL - 1);
        in_data = {$urandom, $urandom, $urandom, $urandom};
        e_v = en; e_port = port; e_data = in_data; e_sof = in_sof; e_eof = in_eof;
        if (en && w == 0) delivered[port]++;
      end
    end
    @(negedge clk);
    in_valid = 0;
    @(negedge clk);
    check(frames_dropped == 32'(dropped), $sformatf("dropped %0d expected %0d", frames_dropped, dropped));
    check(dropped > 0, "some frames dropped");
    for (int i = 0; i < N_OUT; i++) check(delivered[i] > 0, "each output used");
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
