# A wideband FFT polarimeter for a single-dish radio telescope

This RTL is the digital back end of a two-channel radio polarimeter. The
receiver delivers the right-hand (R) and left-hand (L) circularly polarised
signals of the telescope, down-converted to baseband, 0–500 MHz. The back
end samples each of them at 1 GS/s with 8 bits. Per frequency channel it
produces the four correlation products

| product | meaning | Stokes use |
|---|---|---|
| RR | \|R\|² | I = (RR + LL)/2 |
| LL | \|L\|² | V = (RR − LL)/2 (ignored by the instrument) |
| RL | Re(R·L\*) | Q |
| LR | Im(R·L\*) | U |

Each product has 2048 channels, about 237 kHz each. They are integrated over
about 25 ms. Circular feeds are used so that the linear polarisation (Q, U) is
a cross product of two channels. It is then not the small difference of two
large powers, and gain drifts between the channels hardly disturb it.

The design is an "FX" spectrometer: transform first, then multiply. Its
throughput rests on three ideas, and most of this document explains them:

1. **Frame-parallel FFT lanes.** A 125 MHz FPGA clock cannot transform a
   1 GS/s stream in one FFT. Whole frames of 4096 samples are therefore dealt
   out in turn to eight identical lanes, four in each of two FPGAs. Each lane
   transforms one frame every 4096 clocks.
2. **Two real FFTs for the price of one.** R and L are real signals. A lane
   puts R into the real part and L into the imaginary part of a single
   4096-point complex FFT, then separates the two spectra using the symmetry
   of real transforms.
3. **Integration before reduction.** Each lane sums its own spectra in
   54-bit accumulators. The lanes are added and cut to 32 bits only once per
   integration.

## Data flow

```
 ADC 2 x 8 bit, 1 GS/s  ->  8 R + 8 L samples per 125 MHz clock
          |
  adc_fpga ------------------------------------------------------------
  |  bh_window     Blackman-Harris weighting, frames of 4096 samples   |
  |  cal_control   frames per integration, noise-source switch, blank  |
  |  frame_demux   1:2, alternate frames to the two FPGA modules       |
  ----------------------------------------------------------------------
          |                                    |
  fpga_module 0                          fpga_module 1   (identical)
  |  frame_demux 1:4 -> 4 lanes, each:
  |     frame_fifo        8-sample fields in, one R,L pair per clock out
  |     [FFT core]        4096-point complex FFT, 21-bit out (external)
  |     spectrum_decode   Z -> 2X_R, 2X_L, 22 bit
  |     complex_mult      RR, LL, RL, LR, 44 bit
  |     lane_accumulator  sum of N_INT spectra, 54 bit, double-buffered
  |  lane_combiner        sum of the lanes, shift, saturate to 32 bit
          |                                    |
     spec_*[0]                            spec_*[1]   -> DSP / host
```

`polarimeter_top` holds one `adc_fpga` and two `fpga_module`s. All of it runs
in one clock domain of 125 MHz. The widths 8, 8, 21, 22, 44, 54 and 32 bits
are the ones the instrument uses. They live in `polarimeter_pkg`.

## Rates and timing

The numbers below are for the default parameters.

* The ADC delivers one *field* per clock: eight R and eight L samples.
  A frame is 4096 samples per hand, so it takes 512 fields, or 512 clocks.
* The 1:2 demux sends even frames to module 0 and odd frames to module 1.
  Each module then sends frame *f* to lane *f* mod 4. A lane therefore gets
  one 512-clock burst every 4096 clocks.
* The lane FIFO turns that burst into one R,L pair per clock. The FFT core
  consumes one pair per clock. Input and output rates of a lane are exactly
  equal, and a FIFO of two frames is always enough.
* Frames reach the lanes of a module a quarter of a frame period apart. So
  the lanes run staggered, not in lock-step.
* The decoder needs Z[k] and Z[N−k] together, and these leave the FFT 4096
  clocks apart. It stores each frame in one half of a double-buffered frame
  memory while it reads the previous frame from the other half. It reads two
  words per channel, so it outputs one channel every second clock. That
  matches the FFT rate.
* An integration is `N_INT` = 760 spectra per lane, so 6080 frames in all.
  That is 3 112 960 clocks, or 24.9 ms, followed by 25 000 clocks (200 µs)
  of blanking. The result is one integration about every 25.1 ms.
* The combiner reads the four held lane integrations in parallel, one channel
  per clock. It outputs the 2048 channels in 2048 clocks (16 µs), three
  clocks after it starts. The lanes are integrating again meanwhile.

## Separating R and L

With Z = FFT(R + jL), and since R and L are real, X[N−k] = conj(X[k]) for
both spectra. Then, for k = 0 … 2047, with Z[N] read as Z[0]:

```
2 X_R[k] = (Zr[k] + Zr[N-k]) + j (Zi[k] - Zi[N-k])
2 X_L[k] = (Zi[k] + Zi[N-k]) + j (Zr[N-k] - Zr[k])
```

The factor 2 is not divided out. It is the one bit of growth from the 21-bit
FFT output to the 22-bit decoded values. Channel 2048 (the Nyquist
frequency) is not output.

The products are then formed in `complex_mult`:

```
RR = Rr² + Ri²      LL = Lr² + Li²
RL = Rr·Lr + Ri·Li  LR = Ri·Lr − Rr·Li
```

All four carry the same factor 4 from the decoder.

## Number formats and headroom

* **Window.** `bh_window` uses the 4-term Blackman-Harris window
  w(n) = 0.35875 − 0.48829 cos(2πn/N) + 0.14128 cos(4πn/N) − 0.01168 cos(6πn/N).
  The coefficients are stored as 16-bit unsigned words with a peak of 65535.
  The weighted samples are rounded back to 8 bits. The lookup table is
  computed from the formula when the design is initialised.
* **FFT.** The FFT output is 21 bits and unscaled: 8 bits + log2(4096) + 1.
  The FFT of an 8-bit frame cannot overflow it.
* **Products.** After the window, |2X| < 2^20. Each product is therefore
  below 2^41, which is well inside 44 bits.
* **Accumulators.** 760 spectra add under 10 bits, so 54 bits hold them.
  Four lanes add 2 more bits, giving the 56-bit sum in `lane_combiner`.
* **Output.** The 56-bit sum is shifted right by `out_shift`. It is then
  saturated to 32-bit two's complement. `sat_count` counts the clipped words.
  Choose `out_shift` for the signal level. With noise-like input at full
  scale, 12 to 16 leaves ample margin.
* **Output word.** `spec_data` carries one channel as a 128-bit `spec_t`
  holding RR, RL, LR and LL from the most significant end, each 32 bits.

## Calibration cycle

A noise signal can be injected into both receiver channels ahead of the
first amplifier. It goes through an RF switch that the polarimeter drives
through `cal_on`. Integrations alternate between cal-off and cal-on. The
first integration after reset is cal-off, and integration *k* has
`cal_on = k[0]`. Each pair of integrations forms a 50 ms calibration packet;
downstream software subtracts the cal-off spectrum from the cal-on one to
follow the gain and phase drift of the receiver.

`cal_control` counts the frames the window completes. After the last frame
of an integration it toggles `cal_on`, and it holds frames off for
`SWITCH_CYCLES` clocks. A frame in progress always finishes, so blanking
drops whole frames only. Every lane thus sees exactly `N_INT` frames per
integration, and the lanes' integration boundaries stay aligned without any
tag travelling with the data.

## Switching lanes off

`lane_en[m][l]` switches lane *l* of module *m* off. The demux still counts
the frames meant for that lane, but drops them (`frames_dropped`). The other
lanes' share and integration length stay the same. The sensitivity drops by
the lost fraction of the samples. The combiner neither waits for nor adds a
disabled lane. Change `lane_en` only while the design is held in reset.

## The FFT cores

The transforms are vendor library cores: a 4096-point streaming complex FFT
per lane. They are not part of this RTL. The top level brings each lane's
core interface out as ports:

* `fft_in_valid`, `fft_in_sof`, `fft_in_re` and `fft_in_im` (8 bit) go to the core.
* `fft_out_valid`, `fft_out_re` and `fft_out_im` (21 bit) come back from it.

The output is expected in natural order, one word per clock, with no gap
inside a frame. Any latency is accepted. The decoder finds frame boundaries
by counting from reset. `tb/fft_model.sv` is a behavioural stand-in used by
the testbenches. It computes the unscaled DFT in double precision and rounds
to integers.

## What is not in this RTL

* **Adding the two FPGA modules.** The two modules' spectra leave on separate
  ports (`spec_*[0]`, `spec_*[1]`). The single set of 8192 words per
  integration that reaches the host is formed downstream, in the DSP module
  and host software.
* **Analog and off-the-shelf parts.** The feed, polariser, receiver, ADC, DSP
  module, PCI link and host are not here.
* **RFI flagging and calibration arithmetic.** Both run in software on the
  integrated spectra.

## Departures from the instrument, and design choices

Where this RTL departs from the instrument as built:

* The instrument's firmware blocks talk to each other through FIFOs. Here
  they pass data with plain valid strobes at fixed rates. The only FIFO is
  the per-lane frame buffer ahead of each FFT.
* The system diagram draws one FIFO ahead of the FFTs of a module, the
  detailed lane diagram one FIFO per lane behind the 1:4 demux. This RTL
  follows the lane diagram.
* The instrument quotes 25 ms as its shortest integration. Here the
  integration length is the build-time parameter `N_INT`; any value of 2 or
  more works, and the default 760 gives the instrument's 25 ms.
* The instrument's description speaks both of a 4096-point complex FFT and of
  2048 points per hand. This RTL uses 4096 samples per hand and frame, which
  gives the 2048 output channels and the 237 kHz channel width.

Choices made here where the instrument description is silent:

* The window's exact form and coefficient width, and the rounding.
* Strict round-robin frame order, and dropping rather than redistributing
  the frames of a disabled lane.
* The FIFO depth of two frames, and its sticky `overflow` flag.
* The decoder's frame memory and its two-clock-per-channel read.
* The accumulator's double buffering, and the `hold_valid`/`hold_ack`
  handshake with the combiner. This handshake needs `N_INT` ≥ 2.
* The reduction from 56 to 32 bits: a programmable shift with saturation.
* Cal-off before cal-on, and whole-frame blanking.
* The calibration controller placed in the ADC-module FPGA.
* Asynchronous active-low reset of all control state. Memories are not reset.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
compares against values computed in the testbench itself, and ends with a
line `TB_RESULT checks=N failures=M`.

* `tb_polarimeter_top` runs the whole design at reduced size, with eight
  behavioural FFT cores: 1024-point FFT, 2 spectra per lane, 40-clock
  switching time. `spectra_ref` is a scoreboard that recomputes every output
  word from the FFT outputs alone. The test has two runs:
  * Run A: all lanes on.
  * Run B, after a reset: one lane per module off, `out_shift` = 0, and a
    strong DC input so that words saturate.

  The test counts cal toggles, blanking clocks, integration dumps, dropped
  frames and saturated words. It fails if any of them never happened.
* `tb_polarimeter_full` runs the same checks at the full default size:
  4096 points, 760 spectra, eight lanes, 200 µs switching. It takes two
  complete integrations, one cal-off and one cal-on, which is about 6.3
  million clocks. It takes about half a minute with Verilator.

To run a testbench with Verilator:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
    --top-module tb_polarimeter_top -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/polarimeter_pkg.sv tb/tb_polarimeter_top.sv
./obj_dir/Vtb_polarimeter_top
```

Replace the top module name to run the other testbenches.
