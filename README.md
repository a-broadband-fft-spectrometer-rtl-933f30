# A 2 Gsample/s FFT spectrometer core in SystemVerilog

This core turns a continuous stream of 8-bit samples, arriving at 2 Gsample/s, into
accumulated power spectra with 16384 channels across a 1 GHz band. Each block of 32768
real samples is windowed and Fourier transformed. The core then takes the squared magnitude
of every channel and sums it over a programmable number of spectra. A host computer reads
the sums over a 33 MHz bus. No sample is skipped, so the core must finish one 32768-point
real FFT every 16.384 µs. It does so at a 125 MHz clock by running two FFT pipelines side by
side. Each pipeline takes four complex samples per cycle, and every complex sample carries
two real samples.

The data path, in the order the samples flow:

```
ADC words (2 x 16 x 8 bit per strobe)
  -> window_mult      gearbox to 16 samples/cycle, optional 9-bit window, ADC saturation flag
  -> input_buffer     even/odd samples paired into complex words; frame pairs split over
                      the two pipelines, 4 complex lanes each
  -> fft_pipeline x2  16384-point complex radix-4 FFT (7 stages) + real-input split stage
  -> power_spectrum x2  |X|^2, 34 bit
  -> accumulator      36-bit saturating sums, NBLOCKS passes, dual-clock output buffer
  -> host_regs        register file, window table and spectrum readout on the host bus
```

`fft_spectrometer` is the top. The analog front end (amplifier and ADC), the PCI bridge and
the clock doubler are not part of the RTL. Their digital sides are top-level ports:
`adc_valid/adc_a/adc_b` for the ADC, `bus_*` for the host, and `din`, `dout`, `led_l1`,
`led_l2` for the front panel.

## Numbers that fix the architecture

| quantity | value | where it comes from |
|---|---|---|
| sample rate | 2 Gsample/s, 8 bit | one 32-sample ADC word every second 125 MHz cycle |
| real FFT size N | 32768 | `LOG4_NC = 7`: 4^7 = 16384 complex points |
| channels | 16384, 61.035 kHz apart | N/2 |
| samples per cycle | 16 | 2 pipelines x 4 lanes x 2 real samples per complex word |
| cycles per frame, Q | 4096 | 16384 complex points / 4 lanes |
| spectrum period | 16.384 µs | two frames (one per pipeline) every 32.768 µs |
| word widths | 8 -> 9 (window) -> 18 (FFT) -> 34 (power) -> 36 (sum) | |
| shortest accumulation | 32.768 µs | `NBLOCKS = 1`: one pass = two spectra |
| longest accumulation | 2^32 passes = 1.4e5 s | 32-bit `NBLOCKS` |

Every size follows from the single parameter `LOG4_NC`. The testbenches use 3 or 4, which
gives 128- or 512-sample frames, to stay fast. One testbench runs the core at its full default
size.

## Clocks and stalls

There are two clock domains. `clk` is the 125 MHz pipeline clock, which stands for the doubled
62.5 MHz ADC clock. `pci_clk` is the host clock. Inside the `clk` domain the upstream clock
can be stopped, for example by triggering or synchronisation. The core models this with
enables, not with a gated clock:

* `window_mult` forwards the two halves of an ADC word on two consecutive cycles.
* `input_buffer` drives the FFT enable `out_en` only while a complete pair of frames is
  waiting in it.
* Every register in the FFT pipelines advances only when `en` is high. The frame time index
  `t` travels with the data, so a stall anywhere inside a frame is harmless.

Pausing `adc_valid` therefore stops the FFT exactly as a stopped clock would. The end-to-end
testbench inserts random pauses and still gets the same spectrum.

The only crossing between the two domains is the accumulator's output buffer. It is a
two-port RAM with a write port on `clk` and a read port on `pci_clk`. A four-phase
ready/release handshake with two-flop synchronisers (`sync_2ff`) controls who owns it.

## The FFT pipeline

This is the hardest part to follow. It has three pieces.

**Packing.** A real N-point transform is done as an N/2-point complex one. Sample pairs
become complex words, z[n] = x[2n] + j·x[2n+1]. The split stage at the end recovers the real
spectrum. Lane q of a pipeline receives z[q·Q + t] at frame time t. Each lane therefore
carries one contiguous quarter of the frame.

**Radix-4 stages (`r4_stage`, `r4_commutator`).** This is a decimation-in-frequency,
multi-path delay-commutator design.

* Stage s works on sub-transforms of length L = 4^(7−s). At each cycle it takes the four lane
  values as the four inputs of one radix-4 butterfly.
* Output q of the butterfly is multiplied by the twiddle W_L^(q·m), where m = t mod (L/4).
* A commutator with delay D = 4^(5−s) then reorders the lanes for the next stage:
  1. Input lane q is delayed by q·D.
  2. A rotating switch sends input lane (k−p) mod 4 to output p, where k = (t / D) mod 4.
  3. Output lane p is delayed by (3−p)·D.
* After the last stage, lane l at time t holds Z[l·Q + rev4(t)]. Here rev4 reverses the base-4
  digits of t.

Each stage takes two cycles: the butterfly, then the twiddle product. The delays are
circular buffers in RAM (`delay_line`).

**Word width.** The input is 9 bits. Each butterfly can grow a value by a factor of 4, so the
first stages widen by 2 bits per stage: 9, 11, 13, 15, 17. From then on the width is capped
at 18 bits. Those stages round away 1 or 2 bits and saturate, which costs 2^5 of scale over
the seven stages at full size. Twiddles are 18-bit Q1.16 values. They are computed with
`$cos`/`$sin` when the design is elaborated, so no table file is needed. Products are rounded
to nearest.

**Real split (`real_split`).** This stage computes
X[k] = ½(Z[k] + Z*[NC−k]) − (j/2)·W_N^k·(Z[k] − Z*[NC−k]) and outputs X/2.

* It writes each frame into a double buffer at the digit-reversed address. This is the only
  reordering memory in the pipeline.
* In the next frame it reads Z[k] and its partner Z[NC−k] for four bins per cycle.
* At cycle j, lane b carries bin b·Q + j for b = 0, 1 and bin b·Q + (−j mod Q) for b = 2, 3.
  With this choice all four partners of a cycle come from the same buffer row.
* The accumulator uses the same mapping, so a host sees plain bin numbers.

Pipeline latency is 2·7 + Σ 3·D + Q + 2 cycles. At full size that is 2·7 + 4095 + 4096 + 2
= 8207 enabled cycles. The first frame out is complete, because the pipeline counts its
enabled cycles and raises `out_valid` only after that.

## Power and accumulation

`power_spectrum` forms re² + im² in 36 bits, drops the LSB and saturates to 34 bits. The
`accumulator` adds the powers of the two pipelines for each bin, so one pass of Q cycles
holds two spectra.

* It keeps four running-sum RAMs, one per lane. The last of `NBLOCKS` passes writes its sums
  into the output buffer instead of back.
* The next accumulation starts on the following cycle, so there is never a dead pass.
* Sums saturate at 2^36 − 1 and set the overflow flag.
* If the host still holds the output buffer when an accumulation finishes, that accumulation
  is dropped and `GAPS` counts it. Accumulations shorter than the host's readout time
  therefore run with gaps.

LEDs are encoded `{red, green}`:

* L1 shows ADC saturation, meaning a sample of −128 or +127 anywhere in the accumulation.
* L2 shows accumulator overflow.
* Both LEDs are dark while the core is stopped.

## Host interface

The bus carries word addresses. Bits [17:16] select a region:

| region | address | access | content |
|---|---|---|---|
| 0 | 0 CTRL | R/W | bit 0 run, bit 1 window enable, bit 2 36-bit readout |
| 0 | 1 NBLOCKS | R/W | passes per accumulation (each pass = 2 spectra); 0 counts as 1 |
| 0 | 2 STATUS | R | bit 0 spectrum ready, bit 1 ADC saturated, bit 2 accumulator overflow |
| 0 | 3 RELEASE | W | hand the output buffer back after reading |
| 0 | 4 DOUT | R/W | 8 digital outputs |
| 0 | 5 DIN | R | 6 digital inputs (synchronised) |
| 0 | 6 GAPS | R | accumulations lost up to the stored spectrum |
| 1 | n | W | window coefficient n, 9 bit unsigned, 511 = 1.0; only the first half, the window is mirrored |
| 2 | k or 2k+w | R | bin k: 32-bit mode returns sum[35:4]; 36-bit mode returns sum[31:0] at 2k and sum[35:32] at 2k+1 |

Reads return data one `pci_clk` cycle after `bus_rd`, with `bus_rvalid`. The usual sequence
is:

1. Load the window table if one is used.
2. Write NBLOCKS.
3. Write CTRL with run set.
4. Poll STATUS until ready is set.
5. Read the bins.
6. Write RELEASE.

The window output is (x·w + 128) >> 8, with 9 bits out. Unfiltered mode passes 2·x. A
boxcar window is a table of constants. A Kaiser window is what the testbench loads.

## Where this departs from, or goes beyond, its source

The source describes the data path at block level: the window, two parallel radix-4
pipelines of 18 bits, the real-input split, 34-bit power, 36-bit accumulation with
32/36-bit readout, a dual-port output buffer, and the LED and digital I/O behaviour. The
following are this design's own choices:

* the MDC pipeline structure, stage scaling and rounding;
* the bin order at the split stage;
* the frame distribution over the two pipelines (alternate frames);
* the window scaling and the saturation test;
* the register map, the ready/release handshake and the gap counter;
* which 32 of the 36 bits are read.

The analog input, the PCI bridge, the clock doubler and the alternative low-frequency input
option are not modelled.

The design keeps every delay line and table as a plain array. At full size, synthesis maps
these to many RAMs (about 0.6 Mbit in the commutator delay lines of each pipeline).

## Testbenches

Each testbench checks its outputs against values it computes itself. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | size | what it checks |
|---|---|---|
| `tb_window_mult` | LOG4_NC=3 | gearbox order, window product and mirroring, bypass, saturation flag |
| `tb_input_buffer` | LOG4_NC=3 | pairing, lane order, frame split, latency |
| `tb_fft_pipeline` | LOG4_NC=4 | every bin against a floating-point DFT (≤ 6 LSB), latency, stalls |
| `tb_power_spectrum` | – | random and extreme inputs, saturation |
| `tb_accumulator` | LOG4_NC=3 | multi-pass sums, saturation, gaps, readout across clocks |
| `tb_host_regs` | – | every register, both readout widths, window writes |
| `tb_fft_spectrometer` | LOG4_NC=3 | end to end over the host bus (see below) |
| `tb_fft_spectrometer_full` | default (LOG4_NC=7) | 24 bins of a full 32768-point spectrum against a DFT, spectrum rate |

The end-to-end test covers each mechanism and counts it. It fails if any mechanism never
occurs. The mechanisms are:

* unfiltered and Kaiser-windowed spectra;
* 32- and 36-bit readout;
* multi-pass accumulation;
* the spectrum rate;
* gaps while the host holds the buffer;
* ADC stalls;
* ADC saturation (L1 red);
* accumulator overflow (L2 red);
* the idle state;
* digital I/O.

Running one with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fft_pkg.sv tb/tb_fft_spectrometer.sv \
          --top-module tb_fft_spectrometer -o sim && ./obj_dir/sim
```

The full-size testbench builds and runs in well under a minute.
