// tb_lane_combiner: four modelled lanes with FFT_N = 8 (4 channels). For
// each of six integrations the lanes become ready one after another at
// random times; the combiner must not start before the last enabled lane
// is ready. Every output word is compared with the sum of the enabled
// lanes, shifted right and clipped to 32 bits, computed here. The second
// half of the test switches lane 2 off and uses shift 0 and large values,
// so that words clip at both ends. hold_ack must reach exactly the enabled
// lanes, and out_index must count the integrations.
module tb_lane_combiner;
  import polarimeter_pkg::*;
  localparam int unsigned N = 8, NCH = N / 2, L = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [L-1:0] lane_en, hold_valid, hold_ack;
  logic [5:0] out_shift;
  logic [1:0] rd_addr, out_chan;
  acc_t rd_data [L];
  logic out_valid, out_last;
  spec_t out_spec;
  logic [15:0] out_index;
  logic [31:0] sat_count;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  lane_combiner #(.FFT_N(N), .LANES(L)) dut (.*);

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  longint mem [L][NCH][4];
  always @(posedge clk)
    for (int l = 0; l < L; l++) begin
      rd_data[l].rr <= 54'(mem[l][rd_addr][0]);
      rd_data[l].ll <= 54'(mem[l][rd_addr][1]);
      rd_data[l].rl <= 54'(mem[l][rd_addr][2]);
      rd_data[l].lr <= 54'(mem[l][rd_addr][3]);
    end

  // lanes release hold_valid on hold_ack
  logic [L-1:0] set_ready = '0;
  int acks [L];
  always @(posedge clk or negedge rst_n)
    if (!rst_n) hold_valid <= '0;
    else
      for (int l = 0; l < L; l++) begin
        if (hold_ack[l]) begin hold_valid[l] <= 1'b0; acks[l]++; end
        else if (set_ready[l]) hold_valid[l] <= 1'b1;
      end

  function automatic longint clip(longint v, int sh, ref int ns);
    longint t = v >>> sh;
    if (t > 64'sd2147483647) begin ns++; return 64'sd2147483647; end
    if (t < -64'sd2147483648) begin ns++; return -64'sd2147483648; end
    return t;
  endfunction

  int n_words = 0, n_sat = 0, ints_done = 0;
  bit started_early = 0;

  always @(posedge clk) if (rst_n && out_valid) begin
    longint s, g [4];
    int c;
    c = int'(out_chan);
    g[0] = longint'($signed(out_spec.rr)); g[1] = longint'($signed(out_spec.ll));
    g[2] = longint'($signed(out_spec.rl)); g[3] = longint'($signed(out_spec.lr));
    for (int i = 0; i < 4; i++) begin
      s = 0;
      for (int l = 0; l < L; l++) if (lane_en[l]) s += mem[l][c][i];
      check(g[i] == clip(s, int'(out_shift), n_sat), $sformatf("channel %0d product %0d", c, i));
    end
    check(c == n_words % NCH, "channel order");
    check(out_index == 16'(ints_done), "out_index");
    check(out_last == (c == NCH - 1), "out_last");
    n_words++;
    if (out_last) ints_done++;
  end

  task automatic integration(bit big);
    for (int l = 0; l < L; l++)
      for (int c = 0; c < NCH; c++)
        for (int i = 0; i < 4; i++)
          mem[l][c][i] = big ? (longint'($signed(54'({$urandom, $urandom}))) >>> 1)
                             : (longint'($signed(54'({$urandom, $urandom}))) >>> 12);
    // lanes become ready one by one; no output may appear before the last
    for (int l = 0; l < L; l++) begin
      if (!lane_en[l]) continue;
      repeat ($urandom_range(6, 1)) begin
        @(negedge clk);
        if (out_valid) started_early = 1;
      end
      set_ready[l] = 1'b1;
      @(negedge clk) set_ready[l] = 1'b0;
    end
    wait (hold_valid == '0);
    repeat (6) @(negedge clk);
  endtask

  initial begin
    lane_en = '1; out_shift = 6'd24;
    for (int l = 0; l < L; l++) acks[l] = 0;
    for (int l = 0; l < L; l++) for (int c = 0; c < NCH; c++) for (int i = 0; i < 4; i++) mem[l][c][i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int k = 0; k < 3; k++) integration(0);
    lane_en = 4'b1011; out_shift = 6'd0;
    for (int k = 0; k < 3; k++) integration(1);
    check(n_words == 6 * NCH, $sformatf("%0d words out", n_words));
    check(!started_early, "output before all lanes were ready");
    check(acks[0] == 6 && acks[1] == 6 && acks[2] == 3 && acks[3] == 6, "hold_ack per lane");
    check(n_sat > 0 && sat_count == 32'(n_sat), $sformatf("saturation count %0d vs %0d", sat_count, n_sat));
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
