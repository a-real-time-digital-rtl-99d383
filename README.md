# A two-mode digital receiver for spin-noise measurements

Spin-noise spectroscopy looks for very weak, narrow lines in the noise of a
photodetector: the Larmor precession of an atomic vapour shows up as a peak a
few MHz wide at most, far below 100 nV/sqrt(Hz). A swept spectrum analyser
wastes most of its time looking at the wrong frequency. This receiver instead
digitises the detector signal at 125 MSPS with a 14-bit ADC and processes all
of it, in one of two modes:

* **FFT spectrometer (FFTS).** A 4096-point polyphase filter bank and FFT turn
  every 4096 samples into a power spectrum of 2048 channels, each 30.5 kHz
  wide, covering 0 to 62.5 MHz. A programmable number of spectra is summed on
  chip, and only the sum goes to the processor: 1000 spectra is 32.8 ms of
  signal in 8 KiB.
* **Real-time data recorder (RTDR).** The detector signal is multiplied by a
  local oscillator taken from the second ADC channel, or by 1 for baseband.
  The product is then decimated by 100 to a 1.25 MSPS stream covering a
  625 kHz band, and that stream is recorded raw. Recording runs
  continuously, or for a programmed time after an external trigger edge.
  Each packet of 256 samples carries counters that tell when it was taken.
  The host then makes spectra of whatever length it wants, for example
  2048 points for 610 Hz resolution every 1.6 ms.

Both modes end the same way: a stream of 32-bit words is written into a
32 x 2048 block RAM, and the processor reads that RAM and a small register
block over AXI4-Lite. The RTL here is the programmable-logic part of such a
receiver, for a Zynq-class device with a 125 MHz ADC clock. Four parts are
left outside the design: the clock PLL, the ADC itself, the processor and its
network software. All of it runs on the single 125 MHz clock.

## Signal flow

```
adc_ch1 ─ adc_formatter ─┬─ pfb_fir ─ fft_r2sdf ─ power_calc ─ vector_acc ─┐  FFTS (mode 0)
                         │                                                  ├─ axis_bram_writer ─ bram_dp ─ axi_bram_reader ─ buf port
adc_ch2 ─ adc_formatter ─┴─ mixer ─ cic_decim ─ fir_halfband ─ trig_gen ─ rtdr_packetizer ─┘  RTDR (mode 1)
                                   (dc-mode: ×1)                 trig_in      trigger_time (FRC, OC, TC, PC)
                      axi_cfg_sts (cfg words in, sts words out) ─ reg port
```

`drs_top` holds both chains. Bit 1 of configuration word 0 selects the
mode, and the chain not selected is held in reset, so switching modes starts
the chosen one cleanly. The ADC codes are offset binary; `adc_formatter`
inverts the sign bit to make them 2's complement. It is the only step both
modes share.

## The spectrometer

### Polyphase filter bank (`pfb_fir`)

A plain FFT of 4096 samples has a sinc-shaped channel response. Its side
lobes let a strong line leak into channels far away, and its flat top is
narrow, so a line between two bins loses up to 4 dB. The filter bank gives
each FFT input a short FIR filter first. The output sample is

    y[n] = sum_{t=0..7} h[(7-t)*4096 + p] * x[n - 4096 t],    p = n mod 4096

so sample n is combined with the same-phase samples of the seven previous
4096-sample blocks. The prototype h is a Hamming-windowed sinc, 8 x 4096
points long, whose main lobe is one FFT bin wide. The old samples live in
seven 4096-word delay memories that share one read/write pointer. The
coefficients are computed at time zero by an initial block, which acts as a
ROM initialisation (2^16 = 1.0 in an 18-bit word). The
14-bit input is Q1.13 and the output is 18-bit Q1.17, saturated, one clock
later.

### FFT (`fft_r2sdf`, `fft_r2sdf_stage`)

This is the part that needs most care in reading. The FFT takes one sample
per clock, real input on the real part, and is a chain of twelve radix-2
single-path delay-feedback stages with decimation in frequency. The stage
with span 2L (L = 2048, 1024, ..., 1) owns an L-word delay memory and works
on blocks of 2L samples:

1. For the first L samples of a block, each input is stored in the memory.
   At the same time the word it displaces leaves the stage multiplied by the
   twiddle exp(-j 2 pi n / 2L). That word is a difference left by the
   previous block.
2. For the next L samples, the stored sample a and the input b are
   combined. (a + b)/2 leaves at once, and (a - b)/2 goes back into the
   memory to leave, rotated, during the next block.

After twelve stages each 4096-sample frame comes out as its 4096 bins in
bit-reversed order, and `out_idx` carries the natural index of each bin.
Halving both butterfly outputs in every stage scales the result to
X[k]/4096. As long as the input magnitude stays below full scale, nothing
can overflow. The rotated value is saturated as a guard, and in practice
that never triggers. The twiddles are 18-bit constants computed at
elaboration. The first bin of a frame leaves NFFT + log2(NFFT) - 2 clocks
after the frame's first sample enters the FFT.

The bins come out in bit-reversed order, but this is never undone. The bin
index travels with the data to the integrator, which writes by address, so
the order is free.

### Power and integration (`power_calc`, `vector_acc`)

`power_calc` keeps the bins with index below 2048: a real input's spectrum is
symmetric, so these hold all the information. It outputs re^2 + im^2 as a
37-bit power, together with the channel number.

`vector_acc` has two banks of 2048 x 32 bits. Each power is shifted right by
6 and added, with saturation, into the active bank at its channel's address.
The first spectrum of an integration overwrites rather than adds, so no
clearing pass is needed. After `acc_len` spectra (configuration word 1) the
banks swap. The finished bank is then streamed out in channel order 0..2047
while the other one accumulates. The stream's valid is the "dv" signal of the
original design and its data the 32-bit integrated power. Because the 2048 channels land exactly
at RAM addresses 0..2047, one integration fills the buffer. The readout takes
2048 clocks, while an integration takes at least 4096. If a swap comes while
a readout is still blocked, a sticky overrun flag is set; this cannot happen
with the writer used here, which never stalls.

Channel k is centred at k x 30.518 kHz. Integration time is
acc_len x 4096 / 125 MHz, and acc_len is 32 bits wide.

## The recorder

### Mixing and decimation (`mixer`, `cic_decim`, `fir_halfband`)

The mixer forms rf x lo (28 bits, registered). In dc-mode (configuration word
0, bit 2) it forms rf x 8191, i.e. rf x 1.0, instead. Because the mixing is
real, an RF line at f_rf appears at |f_rf - f_lo|. A line 400 kHz above or
below the LO therefore lands at 400 kHz.

The first decimation by 50 is a third-order CIC filter with differential
delay 1. Its integrators are 45 bits wide and wrap. They run at 125 MHz and
are pipelined, so each integrator adds the previous value of the one before
it. The three combs run at 2.5 MSPS, and the output is the top 24 bits.

The second decimation by 2 is a 256-tap FIR filter. Its coefficients are
computed at elaboration:

* ideal response 1/|H_cic(v)| below a quarter of the 2.5 MSPS rate, and 0
  above it, which undoes the CIC's passband droop;
* impulse response by numerical integration of that ideal response;
* Kaiser window with beta = 10;
* unit DC gain;
* rounded to 20 bits.

256 taps for each 1.25 MSPS output are 320 M multiplies per second. Eight
multiply-accumulate lanes each walk 32 taps, one per clock, and finish
33 clocks after every second input, well inside the 50 clocks between
inputs. The output is 32-bit, at 1.25 MSPS, one sample every 800 ns, and
covers 0..625 kHz. With the CIC in front, the response is flat to
within 0.02 dB up to 600 kHz and 6 dB down at 625 kHz. It is more than
90 dB down everywhere above 675 kHz, which is why the coefficients have
20 bits: with 18 bits the rounding limits the stop band to about 82 dB.
Between 625 and 675 kHz the 256-tap transition band gives only 6 to 50 dB,
so the top few tens of kHz of the recorded band carry aliases.

### Trigger, time counters and packets (`trig_gen`, `trigger_time`, `rtdr_packetizer`)

The trigger input is asynchronous. It passes a two-flop synchronizer, and a
rising edge gives a one-clock pulse. In triggered mode (word 0, bit 3), an
edge seen while idle opens a burst of `burst_pkts` x 256 output samples
(word 2, 16 bits; 0 counts as 1). When the burst ends the gate closes.
Edges during a burst are counted but do not extend it. In continuous mode
every sample is recorded.

Four 32-bit counters keep time:

* **FRC** counts 125 MHz clocks.
* **OC** counts FRC wraps.
* **TC** counts trigger edges.
* **PC** counts packets.

On each trigger edge the FRC and OC values are also latched, so the
processor can date the trigger to 8 ns. The packetizer frames every 256
recorded samples as a 260-word packet:

| word | content |
|---|---|
| 0 | PC, packets before this one |
| 1 | TC, triggers so far |
| 2 | FRC when the first sample was recorded |
| 3 | OC at the same moment |
| 4..259 | samples, signed 32-bit, oldest first |

The last sample carries tlast. The 2048-word RAM is a ring that holds a
little under eight packets. The processor follows the write pointer in the
status word and must drain 1.25 M x 4 B x 260/256 = 5.1 MB/s.

## Processor interface

Two AXI4-Lite subordinate ports, each with 32-bit data and byte addresses,
are passed as packed structs (`axil_req_t`, `axil_rsp_t` in `drs_pkg`).
Address and write data may arrive in either order, and write strobes are
honoured.

**Register port** (`axi_cfg_sts`): configuration words are at byte offset
0x000 + 4i and can be read and written; status words are at 0x100 + 4i and
are read-only.

| word | configuration | status |
|---|---|---|
| 0 | [0] master reset of the signal processing, [1] mode (1 = RTDR), [2] dc-mode, [3] triggered | [31] finished, [30] FFTS overrun, [29] burst active, [10:0] write pointer |
| 1 | FFTS: spectra per integration | frames written (integrations or packets) |
| 2 | RTDR: packets per burst [15:0] | TC |
| 3 | – | FRC at the last trigger |
| 4 | – | OC at the last trigger |
| 5 | | PC |
| 6 | | FRC now |
| 7 | | OC now |
| 8 | | FFTS integrations completed |

**Buffer port** (`axi_bram_reader`): word i of the RAM is at byte 4i. Read
data is returned two clocks after the address is taken, and writes are
answered with SLVERR. The writer keeps writing while the processor reads,
so the processor must read a spectrum before the next one overwrites it. It
can check the frame count or the `finished` bit for that; at acc_len = 1
this leaves about 2048 clocks.

A typical FFTS run:

1. Set word 0 bit 0.
2. Write the integration length to word 1.
3. Clear word 0.
4. Poll status word 1 until it increments.
5. Read 2048 words from the buffer.

A recorder run:

1. Set word 0 to 0b1011 (reset, RTDR, triggered).
2. Write the burst length to word 2.
3. Write 0b1010.
4. Follow the write pointer, reading complete packets.

## Sizes and what they allow

| use | needs | built |
|---|---|---|
| 32 ms FFTS integration | 1000 spectra | 32-bit acc_len |
| 1 s and 10 s integrations | 30,518 and 305,176 spectra | 32-bit acc_len; the 32-bit sum saturates for lines stronger than about 1/22 (1 s) or 1/70 (10 s) of ADC full scale |
| 0–62.5 MHz coverage | 2048 channels of 30.5 kHz | yes |
| 100 ms triggered record | 125,000 samples = 489 packets | burst length up to 65,535 packets (13.4 s) |
| continuous record | 5.1 MB/s to the processor | well below the ~30 MB/s a Zynq can move to Ethernet |

## Where this design departs from its source

* The two modes were separate firmware images in the original receiver.
  Here they share one top level and are switched by a configuration bit.
* The original used a library "biplex" FFT core. The radix-2 delay-feedback
  pipeline here is a replacement with the same length and the same
  halving in every stage. It is not bit-identical to the library core.
* The filter-bank window (Hamming), the FIR coefficient recipe, the CIC order
  (3), the shift of 6 before integration and all internal widths are choices
  of this design. The source gives only the tap counts, the Kaiser beta, the
  data formats at a few points and the rates.
* The ping-pong accumulator banks, the packet header layout, the burst length
  in whole packets, the trigger time-stamp registers, the frame counter and
  the register map are this design's.
* The mixer is real. A recorded IF therefore holds both f_lo + f and
  f_lo - f, and the "f_lo to f_lo + 625 kHz" band of the IF option is clean
  only if nothing lies below the LO.
* FRC, OC, TC and PC restart from zero on the master reset and on every
  switch into the recorder mode, not only at power-up.
* With 256 taps the "half-band" filter cannot have the every-other-zero taps
  of a true half-band design. It is built as a CIC-compensating quarter-band
  low-pass.
* The PLL, ADC, processor software and Ethernet link are not part of the RTL.

## Verification

Every module has a self-checking testbench, `tb/tb_<module>.sv`. Each ends by
printing `TB_RESULT checks=<n> failures=<n>`, and each has a watchdog. The
checks:

* The arithmetic blocks are compared exactly with models written in the
  testbench: CIC by direct convolution, FIR with independently computed
  coefficients, filter bank, power, and the integrator with its
  saturation.
* The FFT is compared with a direct DFT on random frames, within a small
  rounding tolerance.
* The bus blocks are driven with address and data in either order, with
  byte strobes, and with random read stalls.
* The recorder chain is checked for a DC level in baseband mode, a 100 kHz
  IF line in IF mode, and exact burst and packet counts.
* `tb_drs_top` runs the whole receiver at its full default sizes:
  * a spectrometer tone in channel 100;
  * a triggered baseband burst;
  * continuous IF recording;
  * a return to the spectrometer.

  It counts that every mechanism happened.

Three testbenches replay the measurements the receiver was built for.
`tb_cw_linearity` feeds tones of 16 to 4096 ADC counts at 1, 20 and 50 MHz
to the spectrometer and 195 kHz above the LO to the recorder. The measured
power follows the square of the amplitude to within 0.15 dB over those
48 dB, provided the ADC model rounds rather than truncates.
`tb_sns_ffts` feeds the spectrometer two broadened lines at 2.4 and 3.6 MHz
(the rubidium isotopes at about 5 G) in white noise. It integrates 1000
spectra and finds the peaks in channels 79 and 118. `tb_rtdr_100ms` records
a 100 ms triggered burst in IF mode, checks the packet count and the
headers, and finds the 400 kHz IF line in the last packet.

## Simulating

Everything is plain SystemVerilog 2017 with no external files. For example,
with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_drs_top \
    -y rtl -y tb rtl/drs_pkg.sv tb/tb_drs_top.sv
./obj_dir/Vtb_drs_top
```

Replace `tb_drs_top` with any other testbench name. Most block testbenches
use reduced sizes (a 64-point FFT, 16-channel integrator) passed as
parameters. The top-level and workload testbenches use the defaults and run
for tens of seconds. To change a size, override the parameters of the
modules concerned. Every coefficient table and twiddle table is recomputed
from its parameters, at elaboration or, for the filter bank, at time zero.
