# A two-channel FFT spectrometer for radio astronomy, in SystemVerilog

A radio telescope receiver delivers an intermediate-frequency (IF) band of
50 MHz, from 150 to 200 MHz. This spectrometer turns that band into
1024-channel power spectra, for two receiver channels at once. It uses no
analog mixer. Each IF signal is sampled directly by a 14-bit ADC at
100 MS/s, and all further work is digital in one FPGA:

1. bring the band to complex baseband;
2. apply a window;
3. run a continuous 1024-point FFT;
4. form the power of each bin;
5. integrate over a chosen number of spectra;
6. hand the result to a PC.

The architecture follows the FPGA spectrometer built for the Effelsberg
100-m telescope (S. Stanko, B. Klein, J. Kerp, "A Field Programmable Gate
Array Spectrometer for Radio Astronomy", A&A 2005). The published
instrument was assembled from purchased IP cores whose insides were never
published. The RTL here is an independent implementation of the same block
structure, formats and rates. Every place where it had to make its own
choice is listed below.

## Signal path

```
            +-------------------------- spectro_channel (x2) --------------------------+
 adc[c] --->| dhbf (fs/4 mix, halfband, /2) --+                                        |
 14 bit     |                                 +-> band_select -> window_lut -> fft_r2sdf|
 ddc[c] --->| ddc_frame_fifo (whole frames) --+   (virtual      (RAM table)   (1024 pt) |
 I/Q, sparse|                                     switch)                     |         |
            |                         averager <- power_calc <----------------+         |
            +---------------------------|----------------------------------------------+
                                        v 64-bit words, one spectrum = 1024 words
                               board FIFO c  ->  64-bit PCI  ->  PC
 8-bit control bus <-> ctrl_regs (window, integration time, mode, start/stop, status)
```

The whole design runs on one clock, the 100 MHz sample clock.
`fpga_spectrometer` is the top. It holds the register file and two
identical channels. The channels share the window table, the mode and the
integration time, and start together. The ADCs, the down-converter chips,
the board FIFOs and the PCI interface are parts of the board, so they
connect through ports.

## Sampling plan and the Full Band front end (`dhbf`)

Sampling at fs = 100 MHz folds the 150–200 MHz band (the 4th Nyquist zone)
onto 0–50 MHz, with its centre at fs/4 = 25 MHz. Because the band sits in
an even zone, it arrives frequency-inverted. The hardware does not correct
this: the PC flips the spectrum.

`dhbf` multiplies the real stream by exp(-jπn/2). That oscillator only
takes the values 1, −j, −1 and j, so the mixer is sign changes and zeros,
with no multipliers. The 25 MHz centre moves to 0 Hz. I and Q then pass an
11-tap maximally flat halfband low-pass filter,
h = [3 0 −25 0 150 256 150 0 −25 0 3]/512, and are decimated by 2. The
result is one complex sample every second clock: 50 MS/s complex, covering
the whole 50 MHz band with no redundant half. The output is scaled by 2,
which cancels the factor ½ lost in real-to-complex mixing. A real tone of
amplitude A at 25 MHz + f therefore leaves as A·exp(+j2πf t), a positive
frequency.

## Narrow Band: down converters and whole frames (`ddc_frame_fifo`)

For finer resolution, external down-converter chips (GC4016-class) cut out
a sub-band of 20 kHz to 10 MHz. They deliver complex samples at their own,
irregular pace. The FFT pipeline, however, must see each 1024-sample frame
as one block. `ddc_frame_fifo` therefore stores the incoming samples. Once
it holds a whole frame, it reads that frame out on 1024 consecutive clocks.
The FIFO is two frames deep, so one frame can fill while the previous one
is read. A sample that meets a full FIFO is dropped and reported. At the
rates a down converter can deliver this cannot happen, because a frame
drains at one sample per clock.

`band_select` is the "virtual switch" between the two sources. It samples
the mode register only when a measurement starts, so a mode change never
splits a frame. On start it also:

- clears the DHBF filter and the frame FIFO;
- marks the first sample it passes with a **sync** flag.

## Frames, sync and valid: how the pipeline keeps count

Samples move with a `valid` strobe. The rate differs by mode:

- Full Band: one sample every second clock.
- Narrow Band: bursts of 1024 samples.

Every stage after the switch works out a sample's position in its frame
by counting valid samples from the sync sample. No per-sample tag travels
with the data. The FFT, in particular, advances **only on valid clocks**,
and its latency is a fixed number of input samples, not of clocks.

| stage | latency |
|---|---|
| `band_select` | 1 clock |
| `window_lut` | 2 clocks |
| `fft_r2sdf` | first result N + log2 N − 2 = 1032 input samples after the sync sample, then 1 clock |
| `power_calc` | 1 clock |
| `averager` | result stored 2 clocks later |

A frame's last FFT results come out only while the next frame's samples go
in. In continuous observation this costs nothing. At the end of a
measurement, the frame still in the FFT is simply not integrated.

## The pipelined FFT (`fft_r2sdf`, `fft_stage`)

This is the block that most needs explaining. The FFT is a radix-2,
decimation-in-frequency, single-path delay-feedback (R2SDF) pipeline: ten
`fft_stage` instances in a chain, one per radix-2 stage.

Stage s has a delay line of D = 1024 / 2^(s+1) complex words (512, 256, …,
1). It treats its input as blocks of 2D samples:

- **First half of a block.** Each input sample is parked in the delay
  line. What comes out of the delay line is the previous block's
  difference a − b. It leaves multiplied by the twiddle factor
  W = exp(−j2π·i/2D), where i is the position within the half block.
- **Second half of a block.** The parked sample a and the arriving
  sample b form the butterfly. a + b leaves at once, and a − b goes into
  the delay line for the next half block.

Each stage therefore delays by D samples, and the total delay is
1023 samples, plus one register per stage. Results leave in bit-reversed
order. `fft_r2sdf` attaches the natural bin number (`out_bin`) to each
result. The averager writes every result to its natural address, so no
reorder memory is needed.

**Word growth.** The input is 16 bits, and one guard bit is added for the
twiddle rotation, which can grow a component by up to √2. Each butterfly
adds one bit, and nothing is scaled away. The output is therefore
16 + 1 + 10 = 27 bits, the output width of the published instrument.

**Twiddle factors.** They are 16-bit signed numbers with 14 fractional
bits, so 1.0 = 16384. Each stage computes its D-entry table at elaboration
with `$cos`/`$sin`. Products are rounded. Against a double-precision DFT,
the worst bin error measured on full-scale noise is about 4·10⁻⁵ of the
spectral peak. On a full-scale pure tone it is about 2·10⁻⁵. This error is
the spur floor that the twiddle quantisation sets.

**Bin convention.** Bin 0 is the band centre (DC after mixing).
Bins 1…511 are above the centre and bins 512…1023 are below it
(negative frequencies).

## Power and integration (`power_calc`, `averager`)

`power_calc` forms re² + im² exactly (55 bits).

The `averager` keeps two banks of 1024 accumulators, each 64 bits wide.
One bank integrates while the other is written out:

- The first spectrum of an integration overwrites its bank, and later
  spectra add to it. Sums saturate at 2^64 − 1.
- After NINT spectra the banks swap, and the next integration starts with
  the very next spectrum. No FFT frame is lost.
- The finished bank is written to the board FIFO as 1024 words, bin 0
  first, one word per clock while the FIFO is not full. A word is
  presented in the same clock as its write enable.
- When the last word is written, **data ready** is set.
- If an integration ends while the previous spectrum is still waiting for
  FIFO space, the new spectrum is discarded and a sticky **overflow** flag
  is raised. The integration in progress is never stalled.

Writing a spectrum out takes 1024 clocks. A Full Band frame takes 2048
clocks, so even NINT = 1 keeps up on the FPGA side. The PCI bus does not
keep up at NINT = 1: 48 828 spectra/s × 8 KiB × 2 channels ≈ 800 MB/s,
against the bus's 528 MB/s burst rate. Sustained Full Band output needs
NINT ≥ 2.

## Controlling a measurement (`ctrl_regs`)

The PC reaches the FPGA over a slow 8-bit register bus. Writes take effect
at the next clock, and read data arrives one clock after `bus_re`.

| addr | name | access | meaning |
|---|---|---|---|
| 0 | CMD | W | bit0 start, bit1 stop, bit2 clear data ready and error flags (one-clock pulses) |
| 1 | MODE | R/W | bit0: 0 Full Band (ADC via DHBF), 1 Narrow Band (DDC) |
| 2–4 | NINT | R/W | spectra per integration, 24 bits, low byte first; 0 acts as 1 |
| 5–6 | WADDR | R/W | window coefficient pointer |
| 7 | WDATA0 | W | coefficient low byte (held) |
| 8 | WDATA1 | W | coefficient high byte: writes the 16-bit coefficient at WADDR, then WADDR increments |
| 9 | STATUS | R | bit0/1 data ready ch0/ch1, bit2 running, bit3/4 spectrum being written out |
| A | ERRORS | R | bit0/1 spectrum dropped ch0/ch1, bit2/3 DDC FIFO overflow ch0/ch1 (sticky) |

A measurement runs in this order:

1. Load the window: write WADDR = 0, then 1024 (WDATA0, WDATA1) pairs.
   The published instrument used a Kaiser window, but any window can be
   loaded. Coefficients are unsigned, with 1.0 = 32768.
2. Write NINT.
3. Write MODE.
4. Write CMD = 1 (start).
5. Poll STATUS for data ready, read 1024 words from each board FIFO,
   then write CMD = 4 to clear the flag.
6. Write CMD = 2 to stop.

The window RAM is not reset, so it must be loaded before the first
measurement. Time = NINT × 1024 / (sample rate): in Full Band, NINT spectra
last NINT × 20.48 µs. The 24-bit NINT allows up to 343 s per hardware
integration. Longer integrations are sums formed in the PC.

## Number formats

| signal | format |
|---|---|
| ADC sample | 14-bit two's complement |
| DHBF / DDC / window output | 16-bit signed I and Q (`spectro_pkg::cplx_t`) |
| window coefficient | 16-bit unsigned, 1.0 = 2^15 |
| FFT output | 27-bit signed real and imaginary |
| power | 55-bit unsigned |
| accumulator, FIFO word | 64-bit unsigned, saturating |

## Where this RTL departs from the published instrument

These follow the published design: two channels, the 14-bit ADC input, the
fs/4 real-to-complex conversion, the Full/Narrow Band switch, a FIFO for the
DDC data that releases 1024-sample frames, the programmable window
look-up table, the 1024-point radix-2 pipelined FFT with 27-bit output, the
power calculator, the averager with programmable integration time and data
ready, the 64-bit FIFO output and the 8-bit control bus.

This design's own choices are:

- **Halfband filter.** The published text only names a "distributed
  halfband filter". The coefficients here are a standard 11-tap maximally
  flat halfband, written as a plain FIR rather than in distributed
  arithmetic.
- **FFT internals.** The original was a purchased core. The R2SDF
  structure, twiddle precision and rounding here are independent. Its
  real and imaginary outputs are parallel, not interleaved on one bus.
- **Integration time.** The published control bus sets the integration
  time as a "number of samples". Here it is a number of spectra (samples
  / 1024).
- **Not given in the publication, so chosen here:**
  - the register map and bus timing;
  - the DDC output format (16-bit I/Q with a valid strobe, on the FPGA
    clock);
  - the DDC FIFO depth;
  - double banking, saturation and the dropped-spectrum rule;
  - spectrum word order;
  - reset behaviour;
  - sampling the mode only at start.
- **Board FIFOs.** The publication places them on the card in its block
  diagram, but once calls them "hardware FIFOs in FPGA". Here they are
  outside the FPGA, and the top drives their write side.
- **Board I/O without ports.** The card's user I/O (blank/sync, time
  signal) and its external trigger have no function given, so they have
  no ports. The start of a measurement is a register command.
- **Frame size.** The publication says the pipeline always moves blocks of
  exactly 2048 samples. That is read here as one 1024-point FFT frame of
  complex samples, which is 2048 I and Q words.
- **DDC sub-bands.** The down converters can deliver four sub-bands of up
  to 2.5 MHz each, combined into up to 10 MHz. How they are combined is not
  described. Here each channel takes one complex stream that the
  converter chip has already combined.
- **DDC configuration.** Setting the DDC chips' sub-band and bandwidth is
  done from the PC, not through this RTL.
- **Sample rate.** The block diagram of the card marks the ADCs 105 MHz,
  the text says 100 MS/s. Nothing in the RTL depends on the rate.

## How far it has been checked

Each block has a self-checking testbench in `tb/`, comparing against values
computed independently in the testbench:

- `tb_dhbf`: mixer and filter against a reference in real arithmetic; the
  output rate; the rotation sense and amplitude of a tone.
- `tb_ddc_frame_fifo`: order; whole-frame bursts only; overflow.
- `tb_band_select`: source selection; sync; mode latched at start; stop.
- `tb_window_lut`: products, rounding, saturation and the index reset at
  sync.
- `tb_fft_r2sdf`: full 1024 points against a double-precision DFT, on
  noise, on a tone with gaps in `valid`, and on noise with a DC offset;
  also bin numbering and the 1032-sample latency.
- `tb_power_calc`, `tb_averager`: exact sums, the bank swap, FIFO back
  pressure, dropping with overflow, saturation.
- `tb_ctrl_regs`: every register.
- `tb_spectro_channel`: a 64-point channel, both modes, tone power within
  10 % (Full Band) and 1 % (Narrow Band).

`tb_fpga_spectrometer` runs the complete design at its default size
(1024 points, two channels), entirely through the register bus:

- It loads a Hann window and integrates 4 spectra.
- In Full Band it checks ADC tones at bins 100 and 824 for location and
  power, with FIFO 0 full at random.
- It holds FIFO 1 full until a spectrum is dropped and reported.
- It switches to Narrow Band and checks DDC tones at bins 37 and 600,
  delivered one sample in three clocks, within 2 %.
- It counts that every one of these mechanisms happened.

It simulates about 82 000 clocks in a few seconds.

`tb_workload_observing` repeats the published observing procedures on the
full-size design, with short integrations (8 spectra) and a Kaiser window
(β = 6) loaded over the bus. It runs three checks:

- **Frequency switching.** In Full Band, a line sits in Gaussian noise.
  The line moves by 6 MHz (122.88 bins) between the ON and OFF
  measurements. ON − OFF must show it positive at bin 300 and negative at
  bin 177, and the noise baseline must cancel to below 2 % of the line
  (measured: 0.4 %).
- **Dynamic range.** In Narrow Band, two lines differ by a factor of 10 in
  intensity, the stronger near full scale. The bins must reproduce the
  ratio within 5 % (measured: 10.003).
- **Sensitivity.** A noise-only channel must integrate down like an ideal
  radiometer. For each bin, D = (S_on − S_off)/(S_on + S_off) has variance
  1/(2·NINT + 1) when C = 1. C must lie within 0.9–1.1 (measured: 1.04).

Not verified:

- timing closure or resource fit on any FPGA;
- behaviour with real DDC or PCI hardware;
- long integrations that reach saturation in the full design (saturation
  is tested in the averager alone).

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
    rtl/spectro_pkg.sv tb/tb_fpga_spectrometer.sv --top-module tb_fpga_spectrometer
./obj_dir/Vtb_fpga_spectrometer
```

Any other testbench is run the same way with its name. Each testbench ends
by printing `TB_RESULT checks=<n> failures=<m>`. The sizes are parameters:

- `N` on `fpga_spectrometer`, `spectro_channel`, `fft_r2sdf`, `window_lut`
  and `averager` (a power of two);
- `FIFO_DEPTH` for the DDC frame buffer;
- the shared widths in `spectro_pkg`.

## Files

| file | contents |
|---|---|
| `rtl/spectro_pkg.sv` | widths, sample type, register addresses, mode type |
| `rtl/fpga_spectrometer.sv` | top: register file and two channels |
| `rtl/spectro_channel.sv` | one channel's chain |
| `rtl/dhbf.sv` | fs/4 mixer, halfband filter, decimation |
| `rtl/ddc_frame_fifo.sv` | DDC frame buffer |
| `rtl/band_select.sv` | Full/Narrow Band switch, start/stop, sync |
| `rtl/window_lut.sv` | window RAM and multiplier |
| `rtl/fft_r2sdf.sv`, `rtl/fft_stage.sv` | pipelined FFT and its stage |
| `rtl/power_calc.sv` | power |
| `rtl/averager.sv` | double-banked integrator and FIFO writer |
| `rtl/ctrl_regs.sv` | 8-bit control register file |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the full system |
| `tb/tb_workload_observing.sv` | frequency switching, dynamic range and radiometer tests on the full design |
