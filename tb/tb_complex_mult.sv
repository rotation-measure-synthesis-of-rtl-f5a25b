// tb_complex_mult: random and extreme channel values through the complex
// multiplier; every product is compared with 64-bit integer arithmetic and
// the two-clock latency is checked.
module tb_complex_mult;
  import polarimeter_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_last, out_valid, out_last;
  logic [10:0] in_chan, out_chan;
  dec_t in_dec;
  prod_t out_prod;
  int checks = 0, failures = 0;

  always #4 clk = ~clk;

  complex_mult dut (.*);

  typedef struct { longint rr, ll, rl, lr; int chan; bit last; } exp_t;
  exp_t q [$];
  int cyc = 0, sent_at [$];

  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    int t;
    e = q.pop_front();
    t = sent_at.pop_front();
    checks++;
    // output registered on the second clock edge after the input edge
    if (sx(out_prod.rr) != e.rr || sx(out_prod.ll) != e.ll ||
        sx(out_prod.rl) != e.rl || sx(out_prod.lr) != e.lr ||
        int'(out_chan) != e.chan || out_last != e.last || cyc - t != 3) begin
      failures++;
      $display("FAIL ch %0d: got %0d %0d %0d %0d exp %0d %0d %0d %0d (latency %0d)", e.chan,
               out_prod.rr, out_prod.ll, out_prod.rl, out_prod.lr, e.rr, e.ll, e.rl, e.lr, cyc - t);
    end
  end

  function automatic longint sx(logic [43:0] v);
    return {{20{v[43]}}, v};
  endfunction

  function automatic logic signed [21:0] rnd22(int mode);
    case (mode)
      0: return 22'($urandom);
      1: return 22'(int'($urandom_range(2000)) - 1000);
      default: return ($urandom_range(1)) ? 22'sd1048575 : -22'sd1048576;  // +-2^20 bound
    endcase
  endfunction

  initial begin
    in_valid = 0; in_last = 0; in_chan = '0; in_dec = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      exp_t e;
      longint rr, ri, lr, li;
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      in_chan  = 11'(i);
      in_last  = (i % 17 == 16);
      if (i < 300) begin
        in_dec.rr = rnd22(i % 2); in_dec.ri = rnd22(i % 2); in_dec.lr = rnd22(i % 2); in_dec.li = rnd22(i % 2);
        if (i % 2 == 0) begin  // keep within the instrument's +-2^20 range
          in_dec.rr = in_dec.rr >>> 1; in_dec.ri = in_dec.ri >>> 1;
          in_dec.lr = in_dec.lr >>> 1; in_dec.li = in_dec.li >>> 1;
        end
      end else begin
        in_dec.rr = rnd22(2); in_dec.ri = rnd22(2); in_dec.lr = rnd22(2); in_dec.li = rnd22(2);
      end
      if (in_valid) begin
        rr = in_dec.rr; ri = in_dec.ri; lr = in_dec.lr; li = in_dec.li;
        e.rr = rr * rr + ri * ri;
        e.ll = lr * lr + li * li;
        e.rl = rr * lr + ri * li;
        e.lr = ri * lr - rr * li;
        e.chan = i % 2048; e.last = in_last;
        q.push_back(e);
        sent_at.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL: %0d results missing", q.size()); end
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
