// tb_lane_accumulator: FFT_N = 8 (4 channels), N_INT = 3. Random product
// spectra are fed, first with random gaps between channels, then with none;
// the testbench keeps its own sums, and checks each product. When
// hold_valid rises, every channel of the held integration is read back
// through rd_addr/rd_data and compared, then acknowledged. Integrations
// continue in the other half meanwhile. At the end hold_ack is withheld
// for two integrations, which must raise overrun.
module tb_lane_accumulator;
  import polarimeter_pkg::*;
  localparam int unsigned N = 8, NI = 3, NCH = N / 2;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_last, hold_valid, hold_ack, overrun;
  logic [1:0] in_chan, rd_addr;
  prod_t in_prod;
  acc_t rd_data;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  lane_accumulator #(.FFT_N(N), .N_INT(NI)) dut (.*);

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  function automatic longint sx54(logic [53:0] v);
    return {{10{v[53]}}, v};
  endfunction

  longint e [$];             // expected sums of finished integrations, flattened
  longint cur [NCH][4];
  int spectra = 0, verified = 0;
  bit do_ack = 1;

  // reader: runs whenever an integration is held
  initial begin
    hold_ack = 0; rd_addr = '0;
    forever begin
      @(negedge clk);
      if (hold_valid && do_ack) begin
        longint ex [NCH][4];
        check(e.size() >= 4 * NCH, "held integration expected");
        for (int c = 0; c < NCH; c++)
          for (int i = 0; i < 4; i++) ex[c][i] = (e.size() > 0) ? e.pop_front() : 0;
        for (int c = 0; c < NCH; c++) begin
          rd_addr = 2'(c);
          @(negedge clk);
          check(sx54(rd_data.rr) == ex[c][0],
                $sformatf("RR channel %0d of integration %0d: %0d vs %0d", c, verified, sx54(rd_data.rr), ex[c][0]));
          check(sx54(rd_data.ll) == ex[c][1],
                $sformatf("LL channel %0d of integration %0d: %0d vs %0d", c, verified, sx54(rd_data.ll), ex[c][1]));
          check(sx54(rd_data.rl) == ex[c][2],
                $sformatf("RL channel %0d of integration %0d: %0d vs %0d", c, verified, sx54(rd_data.rl), ex[c][2]));
          check(sx54(rd_data.lr) == ex[c][3],
                $sformatf("LR channel %0d of integration %0d: %0d vs %0d", c, verified, sx54(rd_data.lr), ex[c][3]));
        end
        verified++;
        hold_ack = 1;
        @(negedge clk) hold_ack = 0;
      end
    end
  end

  task automatic send_spectrum(bit gaps);
    for (int c = 0; c < NCH; c++) begin
      longint p [4];
      while (gaps && $urandom_range(2) == 0) @(negedge clk) in_valid = 0;
      @(negedge clk);
      for (int i = 0; i < 4; i++) p[i] = longint'($signed(44'({$urandom, $urandom}))) >>> 4;
      in_valid = 1; in_chan = 2'(c); in_last = (c == NCH - 1);
      in_prod.rr = 44'(p[0]); in_prod.ll = 44'(p[1]); in_prod.rl = 44'(p[2]); in_prod.lr = 44'(p[3]);
      for (int i = 0; i < 4; i++) cur[c][i] = (spectra % NI == 0) ? p[i] : cur[c][i] + p[i];
      if (c == NCH - 1 && spectra % NI == NI - 1)
        for (int cc = 0; cc < NCH; cc++)
          for (int i = 0; i < 4; i++) e.push_back(cur[cc][i]);
    end
    @(negedge clk) in_valid = 0;
    spectra++;
    repeat (NCH + 2) @(negedge clk);   // the reader needs NCH+2 clocks
  endtask

  initial begin
    in_valid = 0; in_last = 0; in_chan = '0; in_prod = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int s = 0; s < 20 * NI; s++) send_spectrum(1'b1);
    for (int s = 0; s < 20 * NI; s++) send_spectrum(1'b0);
    repeat (20) @(negedge clk);
    check(verified == 40, $sformatf("%0d integrations verified", verified));
    check(!overrun, "no overrun");
    do_ack = 0;
    for (int s = 0; s < 2 * NI; s++) send_spectrum(1'b0);
    check(overrun, "overrun flagged");
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
