# FPGA logic for a broadband, serial EIT system

Electrical impedance tomography (EIT) reconstructs the conductivity inside a
body from many *transfer impedances*: a current is driven between two
electrodes and the voltage is measured between two others. A serial EIT
system has one excitation and measurement circuit and reaches all electrode
combinations through analog multiplexers. This one measures a whole
spectrum for every transfer impedance, not just one frequency. It drives the
current with a broadband chirp (or a sine or rectangular wave), samples the
excitation current and the electrode voltage together, and computes two
complex spectra with an FFT. The host divides the voltage spectrum by the
current spectrum, bin by bin. The result is the impedance at every FFT
frequency, from one short record.

This repository holds synthesizable SystemVerilog for the digital part of
such a system. The architecture follows the system published by Kusche,
Malhotra, Ryschka, Ardelt, Klimach and Kaufmann ("A FPGA-Based Broadband EIT
System for Complex Bioimpedance Measurements — Design and Performance
Estimation", *Sensors* 2015). That publication gives the block structure and
the key numbers. It does not give the logic, so the inside of every block
here is this implementation's own design. Section 8 lists what was taken
from the publication and what was chosen here.

## 1. The signal path at a glance

```
             +-----------+   +--------+        analog: PGA, filter, current source,
 host  --->  | cmd_      |-->| dds    |--> dac_if --> 16-bit DAC ----------------+
 (USB)       | decoder   |   +--------+                                          |
   ^         | (config)  |                                                 electrodes via
   |         +-----------+--> meas_sequencer --> four 8-to-1 analog multiplexers
   |                              |  acq_start / tag
   |                              v
   |   ADC 2x14 bit -> adc_if -> decimator -> frame_averager ==> fft_r2 (voltage)
   |   25 MSPS                                               ==> fft_r2 (current)
   |                                                                 |
   +---- usb_fifo_if <-- sync_fifo (4 KiB) <-- packetizer <----------+
```

Everything runs from one 50 MHz clock. The DAC is updated at 50 MHz and the
ADC is clocked at 25 MHz, derived from the same clock. As a result a record
of 1024 samples is exactly 40.96 us long. Every frequency that is a multiple
of 25 MHz / 1024 = 24.414 kHz completes a whole number of periods in a
record. The design relies on this coherence: the excitation frequencies are
chosen on FFT bins, so no window function is needed and there is no leakage.

| block | file | job |
|---|---|---|
| shared package | `rtl/eit_pkg.sv` | constants, configuration struct `eit_cfg_t`, measurement tag `chan_t`, table functions |
| DDS | `rtl/dds.sv` | sine / rectangle / chirp excitation, digital amplitude |
| DAC interface | `rtl/dac_if.sv` | two's complement to straight binary, register, DAC clock |
| ADC interface | `rtl/adc_if.sv` | 25 MHz ADC clock, capture of both channels, format conversion |
| decimator | `rtl/decimator.sv` | optional down-sampling by 2, 4 or 8 (boxcar) |
| record averager | `rtl/frame_averager.sv` | optional coherent averaging of 2^m records |
| FFT | `rtl/fft_r2.sv` | 1024-point radix-2 FFT, one butterfly per clock (two instances) |
| measurement sequencer | `rtl/meas_sequencer.sv` | electrode multiplexing, settling, frame order |
| command decoder | `rtl/cmd_decoder.sv` | binary host commands, configuration registers |
| packetizer | `rtl/packetizer.sv` | header plus both spectra as a byte stream |
| FIFO | `rtl/sync_fifo.sv` | USB transmit buffer and measurement-tag queue |
| USB interface | `rtl/usb_fifo_if.sv` | FT2232H synchronous-FIFO protocol |
| top | `rtl/eit_top.sv` | wiring and flow control |

## 2. Excitation (`dds`, `dac_if`)

A 32-bit phase accumulator adds a tuning word every clock. Its top 12 bits
address a 4096-entry sine table that is computed at elaboration (peak
32767). The output frequency is

    f = FTW * 50 MHz / 2^32,    so FFT bin k (at no decimation) is FTW = k * 2^21.

The bins 2, 4, 8 and 16 are 48.83, 97.66, 195.3 and 390.6 kHz, and the
sine reset default is bin 2. The rectangular wave is +/-32767, switched by
the phase MSB. In chirp mode the tuning word itself is a 48-bit accumulator
with 16 fraction bits. It starts at `FTW` and grows by `CHIRP` each clock.
After `CHIRP_LEN` clocks both the tuning word and the phase restart, so every
chirp period is identical. The reset values of CHIRP and CHIRP_LEN, with
FTW written to 1,030,792, make the published chirp:

| register | value | meaning |
|---|---|---|
| FTW | 1,030,792 | 12.000 kHz start |
| CHIRP | 1,007,771,126 | (378.625 kHz - 12 kHz) / 2048 clocks, in units of 2^-16 tuning-word LSB |
| CHIRP_LEN | 2048 | 40.96 us = exactly one 1024-sample record |

The sample is multiplied by the 16-bit `AMPL` register. Together with the
four gains of the excitation amplifier this sets the current amplitude.
The sample goes through two register stages (table, multiplier); `dac_if`
adds one more and flips the sign bit for the straight-binary DAC. The DAC
latches on the falling system clock edge.

**Waveform changes.** When the waveform switches to chirp, the first chirp
period starts from whatever tuning word was set before. It is therefore not
a full period, so the settling time (section 4) must cover at least one chirp
period after a waveform change, plus the delay of the analog front end.

## 3. From samples to spectra (`adc_if`, `decimator`, `frame_averager`, `fft_r2`)

**ADC.** `adc_if` divides the clock by two to make the 25 MHz ADC clock. It
captures both 14-bit buses in the cycle where that clock falls, and turns
offset-binary codes into two's complement when the `CTRL` bit 2 is set. Channel A is the
electrode voltage, channel B the voltage across the current shunt.

**Decimation.** `decimator` averages groups of 2^d samples (d = 0..3) and
keeps one result per group. This is a boxcar filter, i.e. a first-order
CIC. With d = 0 it only adds a clock of latency. Decimating by 2^d makes the
record 2^d times longer and the bin spacing 2^d times finer. Bin k then sits
at k * 24.414 kHz / 2^d. The default is d = 0, which matches the 40.96 us
chirp period and the published bin frequencies.

**Averaging.** `frame_averager` adds 2^m consecutive records point by point
(m = 0..7, register `AVG`) and outputs the floor of the mean. Because the
excitation repeats every record, this raises the signal-to-noise ratio
before the FFT without smearing the spectrum. With m = 0 it simply buffers
one record. The accumulator is 2 x 1024 words of 21 bits.

**FFT.** `fft_r2` writes the incoming record at bit-reversed addresses.
It then runs 10 radix-2 decimation-in-time stages with one butterfly per
clock (512 x 10 = 5120 clocks). Finally it streams bins 0..511 in order;
for a real input the upper half is the mirror image. The word width is 32
bits and nothing is scaled. A 14-bit input grows by at most 10 bits, so no
overflow is possible. Twiddles are 18-bit with 16 fraction bits and are
computed at elaboration. Every product is rounded to nearest. Against a
double-precision DFT the largest error seen is 18 LSB, on bins that can
reach 8.4 million. The FFT is single-buffered: it loads only while it is
not computing or sending.

## 4. Electrode multiplexing and the measurement frame (`meas_sequencer`)

This is the part that needs the most care.

**Hardware constraint.** There are 16 current electrodes and 16 voltage
electrodes, but only four 8-to-1 multiplexers. For the current electrodes,
one multiplexer reaches the odd-numbered electrodes (1, 3, ... 15) and the
other reaches the even-numbered ones (2, 4, ... 16). The voltage electrodes
are wired the same way. A pair can therefore only join an odd electrode
with an even one. In the RTL, electrodes are numbered 0..15 (0 = electrode 1).
Electrode e goes to the "odd" multiplexer with select e/2 if e is even, and to the "even"
multiplexer with select (e-1)/2 if e is odd.

**Pairs.** A current pair is (c, c + i_skip) and a voltage pair is
(v, v + v_skip), modulo 16. The skips must be odd: only an odd
distance joins an odd-numbered with an even-numbered electrode. With an
even skip no pair is valid and a frame is empty.
`i_skip = v_skip = 1` is the usual adjacent protocol. `v_skip = 7` gives
the wider voltage spacing that is often better on a thorax.

**Frame.** For c = 0..15 and, within that, v = 0..15, a measurement is made when

* the voltage pair shares no electrode with the current pair, and
* reciprocals are kept, or v > c.

| setting | measurements per frame |
|---|---|
| adjacent (1/1) | 16 x 13 = 208 |
| adjacent, reciprocals omitted | 104 |
| current 1, voltage 7 | 16 x 12 = 192 |
| current 7, voltage 7 | 16 x 13 = 208 |

The reciprocal of measurement (current pair a, voltage pair b) is (b, a).
By reciprocity it carries the same information, so omitting those with
v < c halves the frame and doubles the frame rate. This rule assumes
`i_skip = v_skip`.

**Polarity.** The odd-numbered electrode is always the positive side,
whichever way round the protocol names the pair. The tag therefore carries
`i_pol` / `v_pol`: 1 means the pair starts on an even-numbered electrode
and the host should negate.

**Timing.** The sequencer looks at one candidate (c, v) per clock. For a
valid one it switches the multiplexers and waits `SETTLE` clocks for the
switches and analog filters to settle. It then waits until the averager is
idle, pulses `acq_start` with the tag, and waits for `captured` (the last
sample of the last record is in). Only then does it move on, so the
multiplexers never change during a record. Frames repeat while `run` is
set; clearing `run` ends the frame in progress.

## 5. Flow control and throughput

Each stage waits for the one after it:

1. The sequencer starts an acquisition only when the averager is idle.
2. The averager streams a record to both FFTs in lock step. It stalls while
   either FFT is still busy with the previous record.
3. Each FFT holds its bins until the packetizer takes them: first the
   voltage spectrum, then the current spectrum.
4. The packetizer stalls while the 4096-byte transmit FIFO is full.
5. The USB interface empties the FIFO whenever the USB chip signals room.

A small queue (`sync_fifo`, 4 entries) carries each measurement's tag from
`acq_start` to the packet header. The order is fixed, so tags cannot
overtake data.

The main cost of one measurement is sending its 8202 bytes, about 9100
clocks with a USB chip ready 90 % of the time. On top come loading the FFT
(1024 clocks) and the butterflies (5120 clocks). Acquisition of the next
channel overlaps with all of this. In simulation a 208-measurement frame
with 200 clocks of settling takes 2,988,450 clocks (59.8 ms). That is 3480
voltage/current spectrum pairs per second, matching the published
3480 spectra/s. The data rate is then 28.5 MB/s, within the link's 40 MB/s.
The published 4 frames/s (208 measurements in 250 ms) corresponds to a
settling time of roughly 1.15 ms, `SETTLE` about 57,000. The reset value is
50,000 (1 ms).

## 6. Host interface

**Commands** (host to FPGA): five bytes, `0x80 | address`, then a 32-bit
value with the most significant byte first. Bytes with bit 7 clear outside a
command are ignored, which resynchronises the parser.

| addr | name | bits |
|---|---|---|
| 0 | CTRL | [0] run, [1] omit reciprocals, [2] ADC delivers offset binary |
| 1 | WAVE | [1:0] 0 sine, 1 rectangular, 2 chirp (3 is read as sine) |
| 2 | FTW | tuning word / chirp start (reset 0x0040_0000 = 48.83 kHz) |
| 3 | CHIRP | tuning-word increment per clock, 16 fraction bits |
| 4 | CHIRP_LEN | [15:0] chirp period in clocks (reset 2048) |
| 5 | AMPL | [15:0] amplitude, 65535 = full scale |
| 6 | PGA | [1:0] excitation, [3:2] voltage, [5:4] current amplifier gain code (G = 2^code), driven on `pga_*` |
| 7 | AVG | [2:0] log2 of records averaged, [5:4] log2 of decimation |
| 8 | SETTLE | [23:0] clocks after each multiplexer switch (reset 50,000) |
| 9 | PATTERN | [3:0] current-pair spacing, [7:4] voltage-pair spacing (reset 1/1) |

**Packets** (FPGA to host), one per measurement, 8202 bytes:

| bytes | content |
|---|---|
| 0-1 | 0xA5 0x5A |
| 2-3 | frame number |
| 4 | first current electrode c (0-based) |
| 5 | first voltage electrode v (0-based) |
| 6 | {4'b0, waveform[1:0], v_pol, i_pol} |
| 7 | {1'b0, avg_log2[2:0], 2'b0, dec_log2[1:0]} |
| 8-9 | bins per spectrum (512) |
| 10 .. 4105 | voltage spectrum: per bin, real then imaginary, 32-bit signed |
| 4106 .. 8201 | current spectrum, same layout |

All fields are big-endian. The transfer impedance at bin k is
Z[k] = V[k] / I[k] * (shunt resistance) * (current-PGA gain / voltage-PGA
gain), with a sign flip where the polarity flags say so. Scaling to ohms,
calibration and image reconstruction are host tasks.

## 7. Top-level ports (`eit_top`)

| port | dir | width | use |
|---|---|---|---|
| clk, rst_n | in | 1 | 50 MHz clock, asynchronous active-low reset |
| dac_data, dac_clk | out | 16, 1 | straight-binary DAC code and latch clock |
| adc_clk | out | 1 | 25 MHz ADC clock |
| adc_a, adc_b | in | 14 | ADC voltage channel, current channel |
| mux_i_odd, mux_i_even, mux_v_odd, mux_v_even | out | 3 | multiplexer selects |
| mux_en | out | 1 | multiplexers enabled while measuring |
| pga_exc, pga_v, pga_i | out | 2 | amplifier gain codes |
| usb_rxf_n, usb_txe_n | in | 1 | FT2232H FIFO status |
| usb_rd_n, usb_wr_n, usb_oe_n | out | 1 | FT2232H strobes |
| usb_d_in, usb_d_out, usb_d_oe | in/out/out | 8, 8, 1 | split bidirectional data bus; the pad joins them |
| frame_done | out | 1 | pulse at the end of each frame |

`usb_d_out` is `tx_data` itself and `usb_rd_n`, `usb_wr_n` are
combinational from `usb_rxf_n` / `usb_txe_n`. A byte is then never offered
to a chip that has just become full, at the cost of a combinational path
through the FPGA.

## 8. Relation to the published system, and limits

Taken from the publication: the single 50 MHz clock for DDS and DAC and the
coherent 25 MSPS dual 14-bit ADC. The 16-bit DAC. Sine, rectangular and
chirp excitation, and the chirp's 12 kHz, 378.625 kHz and 40.96 us. Digital
decimation and an optional averaging ahead of two 1024-point FFTs. Four
8-to-1 multiplexers with odd/even pairing and 16 x 13 = 208 measurements per
frame. The pause after each switch and the option to omit reciprocals. A
7-electrode voltage spacing. Host control of waveform and amplifier gains.
The FT2232H USB link.

Chosen here, because the publication does not describe it:

* All block insides: accumulator and table sizes, the linear chirp, the
  boxcar decimator, the coherent power-of-two averaging, the radix-2 FFT
  and its word widths, and the one-candidate-per-clock sequencer.
* The command format, register map and packet format, and the reset values.
* Which multiplexer drives the + input. The publication's figure shows the
  wiring only schematically; here the odd-numbered electrode is +.
* The publication's firmware also runs C code on an 8-bit soft
  microcontroller inside the FPGA, and does not say what that code does.
  Here configuration is decoded directly in logic, and no processor is
  included.
* The FT2232H drives its FIFO interface from its own 60 MHz clock. This
  design assumes that clock is the system clock or is synchronised to it;
  no clock-domain crossing is included.
* The publication reports about 160 current amplitudes from combining the
  excitation gain with a DDS setting, without saying how the DDS scales its
  output. Here a 16-bit amplitude multiplier does it, which gives a finer
  scale than 160 steps.
* The "filtering" beside the FFT in the published block diagram is not
  specified. The only digital filter here is the decimator's boxcar.
* With adjacent current pairs and voltage pairs 7 apart there are 192
  measurements per frame, not 208. The publication reports 208 channels for
  its thorax protocol; 208 results if both spacings are 7.

Trust: every block has a self-checking testbench against an independent
model (real-valued DDS and DFT references, brute-force electrode lists, a
byte-level USB chip model). Each testbench has been shown to fail on a
deliberately broken copy of its block. The whole design is checked end to
end with a model of the analog front end, in which the voltage is a
known, electrode-dependent complex multiple of the current. Every one of
504 measurements reproduced that ratio within 2e-4. A second end-to-end
test puts resistors and an RC phantom into the analog model and recovers
their impedance spectra to 1.2e-4 of the exact values, with a spread
between channels below 1e-5 for sines and 9e-5 at the weakest chirp bin
(quantisation only; a real front end adds
noise and channel mismatch). Not verified: timing
closure on a real FPGA, the real converters' and USB chip's timing, and
the memory mapping. The averager, FFT and FIFO arrays are read
asynchronously, which maps to distributed RAM or registers rather than
block RAM.

## 9. Simulating

All files are SystemVerilog 2017. The package `rtl/eit_pkg.sv` must come
first on the command line; every other module is found by its file name.
Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. With Verilator 5 (the end-to-end test builds without warnings
and runs in about 10 s):

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/eit_pkg.sv tb/tb_eit_top.sv --top-module tb_eit_top -o sim
./obj_dir/sim
```

Replace `tb_eit_top` by any testbench below to run a single block.

| testbench | checks |
|---|---|
| `tb_dds` | every sample of all three waveforms against a real-valued model, sine period, chirp periodicity and rising frequency |
| `tb_dac_if` | code conversion, reset value, latency, clock phase |
| `tb_adc_if` | capture order, format conversion, 25 MSPS rate, clock duty cycle |
| `tb_decimator` | mean of each group for factors 1-8 with gaps in the input |
| `tb_frame_averager` | floor of the mean for 1, 4 and 8 records, back-pressure, timing |
| `tb_fft_r2` | 512 bins of three records against a double-precision DFT, 5120-clock butterfly time |
| `tb_meas_sequencer` | order, multiplexer selects, polarity, settling, frame sizes 208/104/192 |
| `tb_cmd_decoder` | reset configuration, 400 random commands with stray bytes |
| `tb_packetizer` | every byte of three packets under random stalls |
| `tb_sync_fifo` | data order, full/empty, level |
| `tb_usb_fifo_if` | both directions through the FT2232H model, protocol rules, 0.8 byte/clock burst rate |
| `tb_eit_phantom` | known loads through the whole design, as a bench verification would: a 46.57 ohm resistor on all 208 channels (channel spread within +/-0.2 permille), an RC phantom (19.9 ohm + 19.86 ohm parallel 99.7 pF) measured with the chirp on bins 24-366 kHz, and a 46.5 ohm resistor with sines at 97.7, 195 and 390.6 kHz; about 20 s |
| `tb_eit_top` | three full frames at default parameters (sine, rectangle with averaging and no reciprocals, chirp with decimation and 7-electrode voltage spacing), about 10 s of simulation |

`tb/ft2232h_model.sv` is a behavioural model of the USB chip's FIFO side
and is used only by testbenches. Designs that change `N` of `fft_r2` must
keep `frame_averager` and the packetizer's `NOUT` in step. `eit_top`
derives them all from `FFT_N` in the package.
