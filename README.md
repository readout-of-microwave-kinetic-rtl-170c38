# A 1024-channel critically sampled polyphase filter bank for MKID readout

A Microwave Kinetic Inductance Detector (MKID) array is read out by sending
thousands of probe tones, one per resonator, down a single line. The returning
signal is digitised and then split into frequency channels so that each
resonator can be followed on its own. This design is the first of two
splitting stages, the *coarse channelizer*. It cuts the digitised band into
1024 equal channels with a polyphase filter bank (PFB): a prototype low-pass
filter, split into 1024 polyphase branches of 4 taps each, followed by a
1024-point FFT. A plain FFT would let a tone that falls between two bin
centres leak into many bins. The filter in front of the FFT gives each
channel a flat top and steep sides instead, so a resonator lands in one
channel, or in two neighbours when it sits on their shared edge.

The bank is *critically sampled*: each 1024-sample block of input gives one
1024-bin spectrum, so one bin leaves per sample that enters. The hardware
point of the design is that the 1024 branch filters are not built 1024
times. One 4-tap filter is shared by all branches, with its coefficients
changing every clock. It costs four multipliers in total.

Around the bank sits a small test system: a numerically controlled
oscillator (NCO) that produces a test tone, and an AXI4-Lite register file
through which software sets the tone's frequency. This matches the
single-tone tests published for the design. A tone with tuning word
`k * 2^22` lands exactly on bin `k` (and on its mirror `1024 - k`, since the
input is real).

The RTL follows the architecture published by Basha, Jamison-Hooks,
Mauskopf et al. for the Habitable Worlds Observatory / PRIMA readout. That
description fixes the structure and the sizes, but not the word lengths, the
FFT's internals, the filter window or the register map. Those are this
implementation's own choices and are marked as such below.

## Signal path

```
            +-----------+   CTRL.src_sel
 AXI4-Lite -> axi_lite_  |---------------------+
            |  regs     |--ftw--> nco ---+     |
            +-----------+               v     v
 adc_valid/adc_data ----------------->  [ mux ] --> pfb_cs
                                                     |
      +----------------------------------------------+
      v
  pfb_subfilter  ---> fft_r2sdf ---> fft_reorder ---> bin_valid, bin_index,
  (pfb_coef_rom)     (10 x           (ping-pong)      bin_data = {im, re},
   4 taps, 3 x        fft_sdf_stage)                  start_window,
   z^-1024 RAMs)                                      end_window
```

All blocks run in one clock domain and accept at most one sample per clock.
The pipeline only moves when a sample arrives (`valid`), so the input may
have gaps. The NCO gives one sample every clock while it is enabled.

| Quantity | Value | Origin |
|---|---|---|
| Channels / FFT length N | 1024 | published |
| Decimation M | 1024 (= N, critically sampled) | published |
| Taps per branch | 4 | published |
| Prototype coefficients | 4096, held as a 1024 x 4 matrix | published |
| Stopband target | -60 dB | published target; met from 1.5 channels out by the window chosen here (see below) |
| Input sample | 16-bit signed, real | own choice (16-bit NCO output as in the published trace) |
| Coefficients | 16-bit signed Q1.15 | own choice |
| Filter output | 18-bit signed, rounded to nearest | own choice |
| FFT datapath | 32-bit real + 32-bit imaginary, no scaling | own choice; 64-bit output word as in the published trace |
| Twiddles | 18-bit, 1.0 = 2^16 | own choice |
| NCO | 32-bit phase, 1024-entry sine table, amplitude 16384 | own choice |

## The shared subfilter (`pfb_subfilter`)

This is the part that takes the most explaining.

A polyphase bank splits the 4096-tap prototype `h[i]` into 1024 branches.
Branch `r` owns the taps `h[r], h[1024 + r], h[2048 + r], h[3072 + r]`. It
filters every 1024th input sample, four frames deep. The subfilter is one
4-tap filter in transposed form, with a 1024-sample delay (`z^-M`) between
consecutive adders:

```
 x[n] --+------------+------------+------------+
        |            |            |            |
     *h[3M+r]     *h[2M+r]     *h[M+r]       *h[r]
        |            |            |            |
        +--> z^-M --(+)--> z^-M --(+)--> z^-M --(+)--> y[n]
```

Every clock, the coefficient ROM supplies one row `r`: the four taps of one
branch. The sample is multiplied by all four at once. The partial sums then
wait in the delay lines. Each `z^-M` is a 1024-word RAM addressed by the
position in the frame. A partial sum therefore waits exactly one frame, and
then meets the next sample of the same branch. So y[n] = Σ_t h[t·M + r]·x[n − t·M].

**Row order.** The sample at frame position `q = n mod 1024` uses row
`r = 1023 - q`. The rows run in the opposite order to the samples. With
this order, a sample that lies `t·M + r` samples before the end of its frame
is weighted by `h[t·M + r]`. The weight index and the sample's age then rise
together, so each output frame is the prototype filter's convolution sampled
once per frame, as a filter bank needs. If the rows ran in the same order as
the samples, the age and the index would run in opposite directions inside
a frame. Tones that sit on a bin centre would still look correct. Tones
between bin centres would leak badly: in simulation, about -13 dB two
channels away, against better than -56 dB with the reversed order. The
published block diagram shows the four ROM columns and the delay-line
chain, and this RTL keeps them. The diagram does not say in which order the rows are
read; the order above is this implementation's choice. Because the
prototype is symmetric, reversing the rows is the same as reversing the
columns.

**Start-up.** Reset does not clear the delay-line RAMs. Instead, all three
delay-line outputs are forced to zero during the first frame after reset.
Each partial sum already contains the older ones, so this one mask is
enough. The filter then behaves exactly as if its history were all zeros,
and the first three output windows after reset show the filter filling up.

**Pipeline.** The ROM read, the multiply and the add are one clock each. The
delay-line RAMs have a synchronous read one stage ahead of the adders, with
the same address, so a read never meets the write to the same word (for
M ≥ 2). The output comes 3 clocks after the input. The sum is rounded from
Q1.15 and clipped to 18 bits. With 16-bit inputs the largest possible
output is about 1.3 times full scale, so the clipping never acts in
practice.

## Prototype filter and coefficient ROM (`pfb_coef_rom`, `pfb_pkg`)

```
L = 4 * 1024
h[i] = w[i] * sinc((i - (L-1)/2) / 1024),      sinc(x) = sin(pi x)/(pi x)
w[i] = 0.54 - 0.46 cos(2 pi i / (L-1))          (Hamming)
coefficient = round(32767 * h[i])
```

The sinc's first zeros lie one channel away from its centre, so the
passband is one channel wide. The peak tap is 1.0, and each branch's taps
sum to about 1, so a tone on a bin centre gives |X| ≈ A·N/2 (A is the tone
amplitude). The window is not fixed by the source design: choosing it is
listed there as future work. Hamming was chosen here. Measured with the
full-size RTL (`tb_pfb_sweep`), the shared edge of two channels is -6.1 dB.
A tone on a neighbouring channel's centre is 50 dB down. Every bin 3 or
more channels away from a tone is at least 56.3 dB down. That floor comes
from the test tone, not from the filter: -56.3 dBc is exactly the worst-case
phase-truncation spur of an NCO whose sine table has a 10-bit address
(-6.02·10 + 3.92 dB). The filter's own response, computed from the 16-bit
coefficients, is at most -67.9 dB everywhere 1.5 or more channels from the
centre. It is -50.2 dB at the neighbouring channel's centre. So the window
meets the -60 dB stopband target from 1.5 channels out. Another window needs
a change only in `pfb_pkg::proto_coef` (and in the testbenches' reference
models).

The table is computed at elaboration time from this formula, in
`pfb_pkg::proto_coef`. No data file is needed. The ROM has four banks, one
per tap column, each of 1024 x 16 bits. One synchronous read returns a
whole row.

## Streaming FFT (`fft_r2sdf`, `fft_sdf_stage`, `fft_reorder`)

The source design asks for a 1024-point FFT that keeps up with the sample
rate, and does not say how. Here it is a radix-2 single-path delay-feedback
(R2SDF), decimation-in-frequency pipeline of 10 stages. Stage `s` has a
delay line of `L = 512 >> s` complex words and works on blocks of `2L`
samples:

* **First half of a block.** Incoming samples `a_j` are parked in the delay
  line. Meanwhile the differences left there by the previous block leave,
  multiplied by the twiddle `exp(-i·2π·j/2L)`.
* **Second half.** Each incoming `b_j` meets its partner `a_j`. The sum
  `a_j + b_j` leaves at once, and the difference `a_j - b_j` goes into the
  delay line.

The output leaves in bit-reversed order, and `out_bin` labels each value
with its true bin number. The datapath is 32 bits wide and is never scaled.
An 18-bit input can grow by at most 2^10, so nothing can overflow. The
only arithmetic errors are the rounding of the twiddle products and the
18-bit twiddle values. Against a double-precision DFT of random full-scale
data, the error stays within 1e-4 of the largest bin plus 16 LSB.

`fft_reorder` restores natural bin order with two 1024-word banks. One bank
is written at the bin's address, while the other is read out from bin 0 to
bin 1023, one bin per clock. `start_window` marks bin 0 and `end_window`
marks bin 1023. A bank takes at least 1024 clocks to fill and exactly 1024
to read, so the reader always finishes in time. An assertion checks this.

Bins are numbered from 0: bin `k` is centred on `k·Fs/1024`, so that
F = n·Fs/N holds with the bin number n as printed. For example, 17 kHz at
Fs = 512 kHz is bin 34.

## Timing

With an uninterrupted input:

| Path | Clocks |
|---|---|
| Subfilter, sample in to filtered sample out | 3 |
| FFT, first sample of a frame to the first (bit-reversed) output | N - 1 + log2 N = 1033 |
| Reorder, last write of a frame to bin 0 leaving | 2 |
| Whole bank, first sample of a frame to its bin 0 | 2N + log2 N + 3 = 2077 |
| Window length | N = 1024 clocks, back to back |

Throughput is one bin per input sample. The pipeline is pushed along by
input samples, so the last frame before the input stops stays inside the
FFT until more samples arrive.

## Test source and control (`nco`, `axi_lite_regs`, `pfb_readout_top`)

The NCO adds the tuning word to a 32-bit phase every clock while it is
enabled. The top 10 phase bits address a full-period sine table (amplitude
16384, computed at elaboration), so F = FTW / 2^32 · Fs. Both published test
tones are exact:

* 17 kHz at Fs = 512 kHz: FTW = 34·2^22, bin 34.
* 36 MHz at Fs = 128 MHz: FTW = 288·2^22, bin 288.

Tones between bin centres carry the usual phase-truncation spurs of a
10-bit table, at most -56.3 dBc.

AXI4-Lite register map (32-bit registers, byte addresses, byte strobes
honoured, all responses OKAY):

| Address | Name | Access | Contents |
|---|---|---|---|
| 0x0 | CTRL | rw | bit 0 NCO enable; bit 1 source (0 NCO, 1 external `adc_*` port); bit 2 NCO phase reset (write 1, clears itself) |
| 0x4 | FTW | rw | NCO frequency tuning word |
| 0x8 | FRAMES | ro | number of output windows completed |
| 0xC | ID | ro | 0x50464231 ("PFB1") |

The write address and write data are accepted independently. The write
takes effect once both have arrived, and B follows. A read returns R one
clock after AR. Both responses stay valid until taken, which assertions
check. After reset, CTRL and FTW are 0: the NCO is stopped and selected.

`pfb_readout_top` ties these together. Its ports are plain signals:

* the AXI4-Lite slave port;
* `adc_valid` / `adc_data[15:0]`, for real samples from a converter;
* `bin_valid`, `bin_index[9:0]`, `bin_data[63:0] = {imag, real}`,
  `start_window` and `end_window`;
* `nco_out`, to monitor the test tone.

## What this RTL does not contain

* **The weighted overlap-add (WOLA) variant.** It hops by M/2 = 512 samples,
  overlaps the data and corrects phase with a circular buffer before the
  FFT. The source design plans it as the flight version but has not built
  it yet. Only the critically sampled bank is here.
* **Full-rate 5 GS/s operation.** The HWO band needs Fs = 5 GHz. The planned
  answer is to split the input into k parallel streams at Fs/k, which is not
  done here. This bank takes one sample per clock, so its real-time rate is
  its clock rate.
* **The fine channelizer.** This is a 2^9-point digital down-converter per
  tone, which follows the coarse stage. Its structure is not specified.
* **The converter, the processor that runs the control software, the
  on-chip logic analyser, and the rest of the readout chain** (tone
  tracking, pulse detection, averaging, SpaceWire link). The converter
  connects at `adc_*`, the processor at the AXI port, and a logic analyser
  at the outputs.
* **An averaging output.** The published simulation trace shows a 32-bit
  "Average…" signal whose function is not described, so it is not built.
* **Timing closure, resource use and power** are not evaluated. Yosys maps
  the delay lines, FFT delay lines and reorder banks to memories (about
  0.45 Mbit in total), plus 4 coefficient ROMs.

## Files

`rtl/` (one module or package per file):

* `pfb_pkg.sv`: sizes, word lengths, the prototype-filter formula, rounding
  and bit-reversal helpers.
* `pfb_coef_rom.sv`: the 1024 x 4 coefficient ROM.
* `pfb_subfilter.sv`: the shared 4-tap subfilter.
* `fft_sdf_stage.sv`: one R2SDF stage.
* `fft_r2sdf.sv`: the 10-stage FFT.
* `fft_reorder.sv`: the natural-order output with window flags.
* `pfb_cs.sv`: filter + FFT + reorder.
* `nco.sv`: the test oscillator.
* `axi_lite_regs.sv`: the control registers.
* `pfb_readout_top.sv`: the whole system.

`tb/`, all self-checking. Each prints `TB_RESULT checks=… failures=…` and
stops itself with a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_pfb_coef_rom` | all 4096 coefficients against a floating-point Hamming sinc (±1 LSB), symmetry, read latency |
| `tb_pfb_subfilter` | M = 16: every output bit-exact against a direct-form model, with random gaps; phase index; 3-clock latency |
| `tb_fft_r2sdf` | N = 1024: four frames of random data against a double-precision DFT, with input gaps; bit-reversed bin labels; 1033-clock latency |
| `tb_fft_reorder` | N = 16: natural order, window flags, frame counter, 2-clock latency |
| `tb_pfb_cs` | N = 64: whole bank against a floating-point PFB model (tones between bin centres plus noise); latency 2N + log2 N + 3 |
| `tb_nco` | sample-exact sine for the two published tones, retune, pause, phase reset |
| `tb_axi_lite_regs` | address before data, data before address and both together; byte strobes, back-pressure on B and R, read-only registers |
| `tb_pfb_readout_top` | full size, through AXI only: bin 34 tone (peaks 34/990, magnitude, leakage ≥3 channels away below -50 dB), live retune to bin 288, switch to the external port with input gaps (bin 100), phase reset, window counter |
| `tb_pfb_sweep` | full size: NCO tone stepped across channel 101 in 1/8-channel steps; channel shape and crosstalk as quoted above |

To simulate with Verilator 5, for example the full system:

```
verilator --binary --timing -Irtl rtl/pfb_pkg.sv tb/tb_pfb_readout_top.sv \
          --top-module tb_pfb_readout_top -Mdir obj_top
./obj_top/Vtb_pfb_readout_top
```

Any other testbench runs the same way. Add `--assert` to enable the
assertions. Each testbench builds in well under a minute and runs in seconds. To change the
size, override `N`/`NTAPS` on `pfb_cs`. The sizes and word lengths in
`pfb_pkg` are the defaults of all modules. N must be a power of two.
