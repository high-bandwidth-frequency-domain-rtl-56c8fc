# A 10-channel fMUX readout module with digital active nulling

Frequency-domain multiplexing (fMUX) reads out many transition-edge sensors (TESs) through a
single SQUID amplifier. Each sensor sits in series with its own LC resonator and is biased by
its own sine-wave carrier. Here that means ten carriers between 1.5 and 4.5 MHz. A sensor's
signal is the amplitude modulation of its carrier. All ten currents add at the SQUID input. A
SQUID has very little dynamic range, so the carriers must not reach it. A second comb of tones,
the *nuller*, is injected at the same summing junction with the opposite sign. A feedback loop
adjusts each nuller tone until the current left at the SQUID is zero. This is *digital active
nulling* (DAN). Once the loop is closed, the nuller amplitude of a channel follows its sensor
current, and the nuller is what gets read out.

This RTL is the FPGA part of one such readout module. It is built for fast calorimeters rather
than slow sky-scanning bolometers. It works at the full 20 Msps converter rate, has a short
feedback loop, and produces 156.25 ksps per channel. The work per clock is:

* generate ten local oscillators;
* demodulate the ADC stream of the SQUID output into ten complex residuals;
* integrate the residuals into ten complex nuller amplitudes;
* synthesise the carrier comb and the nuller comb for two 16-bit DACs;
* decimate the chosen readout of each channel by 128;
* pack it into timestamped 64-bit packets.

Everything runs time-multiplexed on one 200 MHz clock.

## Time multiplexing: one channel per clock

The converters run at 20 Msps and the logic at 200 MHz. Each converter sample therefore has ten
clock *slots*, and slot *c* belongs to channel *c*. A slot counter in `fmux_module` issues
`slot_ch = 0,1,…,9,0,1,…` every clock. The ADC sample is registered at slot 0 (`adc_strobe`)
and held for the ten slots. Every per-channel quantity lives in a ten-entry register array
indexed by the slot's channel number. This covers the phase accumulators, DAN integrators,
CIC integrators and combs, and FIR delay lines. One set of multipliers and adders serves all
ten channels.

```
            slot_ch                                          (200 MHz, one channel per clock)
  counter ---------> lo_dds --lo_cos/sin--> synth_mixer --> comb_acc --> dac_car, dac_nul (20 Msps)
                        |                      ^  car_amp, nul_i/q
                        +--dm_cos/sin--+       |
  adc_data -> hold -----------> demod_mixer -> dan_ctrl --readout--> cic_decim /64 -> fir_decim2 /2
                                                                                        |
  irig ----------------------------------------------> irig_timestamp --ts--> packetizer --> pkt_*
  lo_ctl_*  (125 MHz) -> ctl_cdc -> lo_dds registers
  dan_ctl_* (125 MHz) -> ctl_cdc -> dan_ctrl registers, timestamp delay
```

Stream stages pass `valid` and a channel number along with their data. Each stage is then
correct by construction, whatever the channel order. The channel number is also what the
testbenches check. Latencies in 200 MHz clocks:

* LO: 1 after the slot.
* Demodulator: 1.
* DAN readout: 1.
* Synthesiser: 1.
* Comb: a new DAC pair one clock after slot 9.

The CIC produces a channel's output in the same clock as the input that completes it. The FIR
adds one more clock.

## The nulling loop

This is the part of the design that needs the most care. Per channel the loop is:

```
   residual r = demod( ADC )                       (complex, baseband)
   n[k+1]     = n[k] + G_DAN * 2^-17 * r[k]        (complex integrator, dan_ctrl)
   nuller DAC = Re( n * e^{j phi} )  = n_I cos(phi) - n_Q sin(phi)
   ADC        = carrier current - nuller current   (the analog summing junction)
```

**Scaling.** The LO has an amplitude of 32767. The demodulator keeps `(x·cos) >> 7`. A tone of
amplitude A therefore demodulates to about 128·A. The integrator is 40 bits wide and adds
`G_DAN · r`. The nuller amplitude is its top 16 bits, so per 20 Msps sample it moves by
`G_DAN · 2^-17` times the residual in DAC units. With unity analog gain around the loop, the
loop gain is K = G_DAN · 2⁻¹⁷ per sample. The closed-loop bandwidth is then
K · 20 MHz / 2π. `G_DAN = 128` gives K = 2⁻¹⁰ and about 3.1 kHz, which is the bandwidth
this class of readout runs at. `G_DAN` is a 16-bit per-channel register. The integrator
saturates rather than wrapping. Disabling DAN on a channel clears its integrator.

**Why the gain must be small.** The demodulated residual of one channel is not band-limited
inside the loop. It also contains the other nine channels' tones, shifted down to their
frequency distance of 0.3 MHz or more. An integrator with a large per-sample gain (say 1/16)
responds strongly to those beat tones. It then injects spurious tones into the nuller comb,
and the channels pull on each other. At kHz bandwidths the response at a 300 kHz offset is
about 1 %, and all ten loops settle independently. The end-to-end testbenches run all ten
channels at G_DAN = 128.

**Loop delay and the demodulator phase offset.** An integral controller converges only while
the phase that the loop delay puts on the returned signal stays well below 90°. Here the
digital loop delay is exactly two 20 Msps samples (100 ns): an ADC sample is demodulated, the
integrator is updated, and the synthesiser output lands in the comb sample two samples later.
A tone at 4.46 MHz turns by 2 × 80° in that time. `lo_dds` therefore gives the demodulator
its own LO (`dm_cos/dm_sin`) with a programmable per-channel phase offset. Programming
`-d · FTW` compensates d samples of delay. With the converter and cable delays outside this
logic, the offset has to be calibrated on the real system in the same way. The testbenches
use d = 2. They then see a residual with Q = 0 when DAN is off.

**Readout switch.** With DAN off, the readout sent to the decimator is the residual itself. In
that case it is the carrier current, 128·A before decimation. With DAN on, the readout is the
integrator (top 24 bits), which is 256·A once the loop has settled. The per-channel `dan_en`
output shows which of the two a channel is sending.

**Sign conventions.** The carrier is `A · cos(phi)`, with a real amplitude only. The nuller is
`Re(n · e^{jφ})`. The plant is assumed to subtract the nuller. A system whose analog chain
inverts the sign needs the opposite sign. The same demodulator phase offset, shifted by 180°,
provides it.

## Tone generation

`lo_dds` keeps a 32-bit phase and a 32-bit tuning word per channel, so f = FTW · 20 MHz / 2³².
That covers 0 to 10 MHz in 4.7 mHz steps. The top 12 phase bits address a quarter-wave table
of 1024 samples, sin((k + ½) · π / 2048) · 32767. The table is computed at elaboration and not
read from a file. Quadrant folding produces sine and cosine. The half-sample offset keeps the
table symmetric, so the folded waveform has no DC term.

`synth_mixer` forms `car · cos` and `n_I · cos − n_Q · sin`, each shifted back by 15 bits.
`comb_acc` sums the ten slots of one sample into the two DAC words and saturates them to
16 bits. A saturation sets `dac_clip`. The ten carriers of the testbench, with amplitudes of
1500 to 2400, sum to at most 19 500 and fit.

## Decimation to 156.25 ksps

`cic_decim` is a 6-stage cascaded integrator-comb filter. It decimates by 64 with differential
delay 1, separately for I and Q of each channel. The integrators run at full Hogenauer width,
24 + 6·log2 64 = 60 bits, and are allowed to wrap. The six comb stages undo the wrap. A shared
phase counter picks the one round in 64 where the combs run. The DC gain 2³⁶ is removed by a
shift of 28 bits, so 8 fractional bits remain in the 32-bit output. The lower edge of the first band that folds onto the 0–78 kHz science band is 312.5 − 78.125 = 234.375 kHz. A tone there is attenuated by 62.7 dB relative to DC, so the
alias rejection is better than 60 dB. The testbench measures this on the hardware. A settled readout of 128·A
(DAN off) therefore leaves the CIC as 32 767·A, and 256·A (DAN on) as 65 536·A.

`fir_decim2` flattens the CIC's passband droop and keeps every second sample. It has 21
symmetric taps (in the source). They are a least-squares fit to the inverse CIC response up to
50 kHz with a stopband from 100 kHz, and they sum to 2¹⁷, giving a DC gain of 1. The combined
response is within 2 % of flat to 50 kHz and 3 dB down near 70 kHz. The filter takes about
21 CIC samples (67 µs) to settle after a step. The FIR tap values are this design's own: no
published values were available.

## Packets and timestamps

Each output sample of the module becomes one packet of eleven 64-bit words on a valid/ready
stream (`pkt_tdata/tvalid/tready/tlast`):

| word | contents |
|---|---|
| 0 | timestamp header: `{locked, 0, day[9:0], hour[5:0], min[6:0], sec[6:0], ticks[31:0]}`, time fields in BCD |
| 1…10 | channel 0…9: `{I[31:0], Q[31:0]}` |

One header per ten data words is the 10 % framing overhead. 11 words every 1280 clocks is
110 Mbit/s. `packetizer` writes the words into a 32-word first-word-fall-through FIFO. A
packet enters only if all eleven words fit when channel 0 arrives. Otherwise the whole packet
is dropped and `pkt_drop_cnt` is incremented. A receiver never sees a torn packet. Wrapping
the stream in UDP/Ethernet frames is left to the downstream network interface.

`irig_timestamp` decodes an IRIG-B time code on the `irig` input. Each 10 ms symbol is a pulse
of 2 ms (0), 5 ms (1) or 8 ms (position marker). The decoder uses thresholds at 3.5 and
6.5 ms, counted in clocks through `CLK_PER_MS`. Two markers in a row start a frame. If the
frame's markers sit at every tenth position and it has 100 symbols, its BCD
second/minute/hour/day are taken over at the next frame start, and `ts_locked` is set. A
malformed frame clears the lock. `ticks` counts 200 MHz clocks since the decoded second began.
It keeps running without lock, so headers are always spaced by 1280.

The timestamp *delay* exists because the data in a packet are several output samples older
than the packet. The decimators take that long to respond. The live time is written into a
16-entry ring at every output sample. The header then carries the time of the sample
`dly` samples earlier (`dly = 0` gives the live time). `dly` is a register.

## Control registers

Two write-only register buses run at the 125 MHz control clock (`lo_ctl_*`, `dan_ctl_*`; valid,
ready, 8-bit address, 32-bit data). In a full system a processor drives them over SPI. Each
bus crosses into the 200 MHz domain through `ctl_cdc`, a toggle handshake. The write is held
on the write side. A toggle goes over a 2-flop synchroniser, the read side produces a one-clock
write strobe, and an acknowledge toggle comes back. `ready` is low until then. A write takes
about 6 processing clocks, and one write is in flight at a time.

Address = `{field[1:0], channel[3:0]}`:

| bus | field | register |
|---|---|---|
| lo_ctl | 0 | frequency tuning word, 32 bit |
| lo_ctl | 1 | demodulator phase offset, 32 bit (fraction of a turn × 2³²) |
| dan_ctl | 0 | carrier amplitude, signed 16 bit |
| dan_ctl | 1 | G_DAN, unsigned 16 bit |
| dan_ctl | 2 | DAN enable, bit 0 |
| dan_ctl | 3 | timestamp delay in output samples, bits 3:0 (channel ignored) |

## How this compares with the published system

Built as published:

* 10 channels;
* a 200 MHz time-multiplexed datapath at 20 Msps per channel;
* a DDS local oscillator feeding demodulator, carrier and nuller mixers;
* an integral DAN controller with one gain per channel;
* a readout that switches between nuller and residual;
* a carrier with a real amplitude only;
* an accumulated carrier and nuller comb for the two DACs;
* a 6-stage CIC /64 to 312.5 ksps;
* a compensating FIR /2 to 156.25 ksps;
* 64-bit IQ words with 10 % packet overhead, about 110 Mbit/s;
* IRIG-B timestamps with a programmable delay;
* 125 MHz control interfaces.

This design's own choices are the internal widths, the LUT size, the demodulator phase offset,
the FIR taps, the register map, the packet header layout, whole-packet dropping and the
clock-crossing scheme.

Differences to keep in mind:

* **Loop latency.** The published firmware's loop latency is estimated at about 2.2 µs, and
  part of it comes from inherited components. The digital loop here is 100 ns, plus whatever
  the converters and cabling add. A faster loop only makes it easier to stay stable.
* **One module.** The board could hold eight modules, and the published system also ran a
  15-channel, 300 MHz variant. Neither is built. `NCH` is a parameter (up to 16 channels with
  the 4-bit channel index), but timing closure at 300 MHz is not addressed.
* **No network stack.** Packets leave as a plain stream.
* **No analog model in the RTL.** The SQUID, resonators, sensors and converters are not part
  of the RTL. The testbenches stand in for them with an ideal summing junction,
  `ADC = (1 − p) · carrier DAC − nuller DAC`. There is no resonator impedance, no
  frequency-dependent loop gain and no noise. Behaviour that depends on them, such as the
  bandwidth limit set by loop-gain variation across the band, cannot be seen here.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and stops itself through a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
    -Irtl -y rtl -y tb +libext+.sv rtl/fmux_pkg.sv rtl/ctl_if.sv \
    tb/tb_fmux_module.sv --top-module tb_fmux_module -o sim
./obj_dir/sim
```

Replace `tb_fmux_module` with any other testbench name.

| testbench | what it checks |
|---|---|
| `tb_lo_dds` | every LO value against sines from an independent phase model (1 LSB), with per-channel tuning words and phase offsets; slot order and 1-clock latency |
| `tb_demod_mixer`, `tb_synth_mixer` | products and shifts against an integer reference |
| `tb_comb_acc` | per-sample sums, saturation and clip flags, the DAC strobe every 10 clocks |
| `tb_dan_ctrl` | integrator against a reference model, enable/disable, readout switch, closed-loop convergence |
| `tb_cic_decim` | every output against a direct convolution with the 379-tap impulse response of the 6-stage CIC; DC gain; alias rejection > 60 dB at 234.375 kHz |
| `tb_fir_decim2` | every output against a reference filter, with 10 interleaved channels; unit DC gain and the CIC+FIR response within 2 % up to 50 kHz |
| `tb_irig_timestamp` | lock, decoded BCD time, tick count, programmable delay, loss of lock on a bad frame |
| `tb_packetizer` | packet structure, back-pressure, whole-packet drop and its counter |
| `tb_ctl_cdc` | every write delivered once, in order, including back-to-back writes; latency bound |
| `tb_fmux_module` | the whole module, with IRIG-B sped up so that it locks |
| `tb_fmux_full` | the same sequence at default parameters; no IRIG-B code is sent, since one frame is a second of simulated time (about 6 minutes of simulation), so lock at the real 200 000 clocks per millisecond is only shown scaled, in `tb_irig_timestamp` and `tb_fmux_module` |

The two end-to-end tests run the following sequence:

1. Program ten carriers at 1.472–4.460 MHz.
2. With DAN off, check that the residual readout of every channel is 32 767·A within 1 %, with
   Q near 0.
3. Switch DAN on with G_DAN = 128. Check that the ADC residual falls below 2 % of the summed
   carrier, and that the nuller readout is 65 536·A.
4. Drop the returned carrier by 10 % and check that the nuller follows. One loop time constant
   (51.2 µs) after the step, each nuller must have covered 55–72 % of it; 63 % is
   expected for a 3.1 kHz first-order loop, and the simulation gives 64 %.
5. Stall the packet output until whole packets are dropped.

Throughout, every header is checked:

* consecutive headers are spaced 1280 clocks apart, one packet per 6.4 µs;
* each header carries the time of two output samples earlier, as programmed;
* with `tb_fmux_module`, the decoded day, hour, minute and second are correct.

About 1 ms of simulated time takes well under a second.
