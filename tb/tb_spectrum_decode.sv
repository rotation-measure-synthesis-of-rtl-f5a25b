// tb_spectrum_decode: FFT_N = 16. Twelve frames of random 21-bit complex
// words, the first six back to back, then with random gaps. Every output
// channel is compared with 2 X_R[k] = Z[k] + conj Z[N-k] and
// 2 X_L[k] = -j (Z[k] - conj Z[N-k]) computed here; channel numbers, the
// last flag, the two-clock output spacing during a read and the absence of
// overrun are checked as well. Finally the reader is held with force
// while frames keep coming, which must raise overrun.
module tb_spectrum_decode;
  import polarimeter_pkg::*;
  localparam int unsigned N = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, out_valid, out_last, overrun;
  logic [20:0] in_re, in_im;
  logic [2:0] out_chan;
  dec_t out_dec;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  spectrum_decode #(.FFT_N(N)) dut (.*);

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  typedef struct { longint rr, ri, lr, li; } e_t;
  e_t q [$];
  int n_out = 0, last_t = -100, cyc = 0;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && out_valid) begin
    e_t e;
    check(q.size() > 0, "output without frame");
    e = q.pop_front();
    check(longint'(out_dec.rr) == e.rr && longint'(out_dec.ri) == e.ri &&
          longint'(out_dec.lr) == e.lr && longint'(out_dec.li) == e.li, $sformatf("channel %0d values", out_chan));
    check(int'(out_chan) == n_out % (N / 2), "channel number");
    check(out_last == (n_out % (N / 2) == N / 2 - 1), "last flag");
    if (n_out % (N / 2) != 0) check(cyc - last_t == 2, "two clocks per channel");
    last_t = cyc;
    n_out++;
  end

  task automatic send_frame(bit gaps);
    longint zr [N], zi [N];
    for (int n = 0; n < N; n++) begin
      zr[n] = longint'($signed(21'($urandom)));
      zi[n] = longint'($signed(21'($urandom)));
      if (gaps) while ($urandom_range(3) == 0) @(negedge clk) in_valid = 0;
      @(negedge clk);
      in_valid = 1; in_re = 21'(zr[n]); in_im = 21'(zi[n]);
    end
    for (int k = 0; k < N / 2; k++) begin
      e_t e;
      int m = (N - k) % N;
      e.rr = zr[k] + zr[m];
      e.ri = zi[k] - zi[m];
      e.lr = zi[k] + zi[m];
      e.li = zr[m] - zr[k];
      q.push_back(e);
    end
  endtask

  initial begin
    in_valid = 0; in_re = '0; in_im = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int f = 0; f < 6; f++) send_frame(0);
    for (int f = 0; f < 6; f++) send_frame(1);
    @(negedge clk) in_valid = 0;
    repeat (3 * N) @(posedge clk);
    check(n_out == 12 * N / 2, $sformatf("%0d channels out", n_out));
    check(!overrun, "no overrun");
    // a steady input cannot outrun the reader, so hold the reader at its
    // first step and write three frames: the third meets a full half
    force dut.reading = 1'b1;
    force dut.rcnt = '0;
    for (int f = 0; f < 3; f++) send_frame(0);
    @(negedge clk) in_valid = 0;
    check(overrun, "overrun flagged");
    release dut.reading;
    release dut.rcnt;
    q.delete();
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
