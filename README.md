# Bunch-by-bunch cavity-BPM feedback firmware

A linear collider has to hold its beam spot still at the nanometre level.
This firmware does that, train by train, for two-bunch trains. It measures the
vertical position of the first bunch at one or two cavity beam-position
monitors (BPMs), then drives a stripline kicker so that the second bunch,
280 ns later, arrives corrected. The time budget is tight. The whole loop
(BPM, analogue down-mixing, ADCs, this logic, DAC, kicker amplifier and
kicker) must finish within the bunch spacing. The logic therefore has no
divider and no iterative steps. It has one sample clock, a fixed pipeline and
table lookups.

The RTL follows the published description of such a system: the FONT IP
feedback at the ATF2 final focus, running on a Virtex-5 board with 14-bit ADCs
at 357 MHz. Widths, the table format, the register map and the serial
protocol were not published. They are this design's own choices, and each is
marked as such below and in the header comment of its file.

## What the firmware computes

Each dipole BPM gives two baseband waveforms, I and Q. A reference cavity gives
a charge waveform, q. After the baseline of each waveform is removed, the
position of a bunch is

    y = (I cos θ + Q sin θ) / (k q)

where θ is the BPM's I/Q phase and k is its position calibration. The kick, in
DAC counts, is

    V = −G·y/M + c

where G is the loop gain, M is the kicker calibration (µm per DAC count) and
c is a settable offset. Dividing by q takes too long for the loop. Instead,
the q sample addresses four lookup tables, one for each term:

    V = c − ( S_IA·L0(q) + S_QA·L1(q) + S_IB·L2(q) + S_QB·L3(q) ) / 2^16

The four terms are I and Q of feedback input A and I and Q of input B. Each
S is an **integrated** I or Q: the sum of 1 to 15 consecutive samples around
the waveform peak. Integration lowers the noise. Published results show the
resolution going from about 41 nm with one sample to 19 nm with eleven. Each
table entry L_i(q) = 2^16·C_i/q folds cos θ or sin θ, 1/k, G, 1/M and, in
two-BPM mode, the BPM's interpolation weight into a single number. The
host computes the tables and loads them. Changing the gain or the BPM
calibration means reloading a table. The logic does not change.

Two modes are used:

* **single-BPM**: input A is the BPM at which the beam is stabilised. Input B
  is forced to zero.
* **two-BPM**: inputs A and B are two BPMs on either side of the target point.
  The target position is interpolated between them, with the interpolation
  weights held in the tables (for example 32:68 for IPA/IPC around IPB).

## Timing: one window per trigger

All logic runs on the 357 MHz sample clock, which is locked to the beam.
Each ADC channel delivers one sample per cycle.

1. A rising edge on `trig_in` passes through a two-flop synchroniser. It
   then waits `trig_delay` cycles and opens a window of 164 samples (462 ns,
   one damping-ring turn). `smp_idx` counts the samples of the window. The
   length can be shortened at run time (register WINLEN). 164 is the
   maximum and the reset value.
2. The window samples `int_start … int_start+int_len−1` are summed by four
   integrators, which are cleared at the start of every window.
3. The q sample at index `q_sample` is latched. Its magnitude, clamped to
   4095, addresses the four tables. `q_sample` must be at most
   `int_start+13`.
4. The calculation always starts at index `int_start+15`, whatever
   `int_len` is. The kick therefore leaves at the same time for any
   integration length from 1 to 15. This is the property that lets the
   integration length be tuned without retiming the loop.
5. The multiply/add/saturate pipeline takes 3 cycles. The DAC word is then
   loaded, after an extra `kick_delay` cycles if one is set. It is held for
   `kick_len` cycles and then returns to zero drive.

In clock edges: the DAC word changes **20 + kick_delay** edges after the
edge that captures the ADC word of the first integrated sample. That is
6 + kick_delay edges after the capture of the 15th possible sample, or 56 ns
plus the added delay. The published end-to-end loop latency of 83 samples
(232 ns) also counts cables, ADC and DAC conversion, and the amplifier's
35 ns rise. None of those are in this RTL.

`kick_delay` exists to measure the latency. A constant kick (`MODE_CONSTANT`,
e.g. 2000 counts) is sent with the normal timing and slid later in time until
it no longer reaches the second bunch. `amp_trig` is a gate output that fires
the kicker amplifier. It is high for window samples
`amp_start … amp_start+amp_len−1`.

With the per-train toggle bit set, the kick is applied only on every other
trigger (`fb_on` shows which). Feedback-on and feedback-off trains can then
be compared inside one data set.

## Blocks

| file | role |
|---|---|
| `font_pkg.sv` | shared constants, channel/BPM/mode enums, register map, `cfg_t` settings struct |
| `adc_frontend.sv` | registers 7 ADC words, drops the LSB (14 → 13 bits), subtracts a per-channel baseline |
| `sample_window.sv` | trigger synchroniser, trigger delay, window of up to 164 samples, integration gate, q strobe, fixed-time calculation strobe |
| `bpm_mux.sv` | the four multiplexers: I/Q of input A and of input B from IPA, IPB, IPC |
| `sample_integrator.sv` | running sum of gated samples (four instances) |
| `charge_lut.sv` | 4096 × 16-bit table of C_i/q, synchronous read (four instances) |
| `fb_calc.sv` | products, sum, scale, offset c, saturation; feedback / constant / off |
| `kick_timing.sv` | DAC output register, added delay, hold length, amplifier-trigger gate |
| `waveform_buffer.sv` | keeps the last window of all seven channels for read-out |
| `uart_rx.sv`, `uart_tx.sv` | RS-232 link, 8N1 |
| `ctrl_regs.sv` | command decoder and register file |
| `font_fb_top.sv` | top level |

The channel order inside the firmware is IPA I, IPA Q, IPB I, IPB Q, IPC I,
IPC Q, reference q (`chan_e`). On the original board these came in on ADCs 4,
5, 1, 2, 7, 8 and 9.

### Top-level ports

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | 357 MHz sample clock; synchronous active-high reset |
| `trig_in` | in | 1 | beam trigger |
| `adc_in[7]` | in | 14 each | ADC words, two's complement, order as above |
| `uart_rxd` / `uart_txd` | in/out | 1 | serial control link |
| `dac_code` | out | 14 | kicker DAC word, offset binary (8192 = no kick) |
| `dac_update` | out | 1 | one-cycle pulse when `dac_code` changes |
| `amp_trig` | out | 1 | kicker-amplifier trigger |
| `trim_dac[7]` | out | 16 each | settings for the external trim DACs that null each ADC's offset |
| `fb_on` | out | 1 | the kick is enabled on the current train |

## Control link

The link runs at 115200 baud, 8N1 (parameter `CLKS_PER_BIT` = 3099 at
357 MHz). A command starts with the byte `{rd, addr[6:0]}`. A write
(`rd`=0) is followed by two data bytes, MSB first. A read (`rd`=1) is
answered with two bytes, MSB first.

| addr | name | bits |
|---|---|---|
| 0x00 | CTRL | [1:0] mode (0 off, 1 feedback, 2 constant), [2] two-BPM, [3] toggle per train |
| 0x01 | SEL | [1:0] BPM of input A, [3:2] BPM of input B (0 IPA, 1 IPB, 2 IPC, 3 none) |
| 0x02 | TRIGDLY | trigger delay, cycles |
| 0x03 | INTSTART | first integrated sample |
| 0x04 | INTLEN | samples integrated, 1–15 (0 is stored as 1) |
| 0x05 | QSAMPLE | charge sample index |
| 0x06 | KICKDLY | added kick delay, cycles |
| 0x07 | KICKLEN | kick hold length, cycles |
| 0x08 | CONST | constant drive, signed 14-bit |
| 0x09 | COFF | offset c, signed 14-bit |
| 0x0A/0x0B | AMPSTART / AMPLEN | amplifier trigger gate |
| 0x0C | LUTADDR | [13:12] table, [11:0] address |
| 0x0D | LUTDATA | write an entry; the address increments |
| 0x0E | WFADDR | [10:8] channel, [7:0] sample |
| 0x0F | WFDATA | read a captured sample; the sample index increments |
| 0x10–0x16 | OFFSET0–6 | baseline offsets, signed 13-bit |
| 0x17 | SATCNT | read: kicks clipped to the DAC range |
| 0x18–0x1E | TRIM0–6 | trim-DAC values |
| 0x1F | STATUS | read: trigger count |
| 0x20 | WINLEN | window length, 1–164 (0 gives 164) |

Loading a table: write LUTADDR once, then write LUTDATA once per entry. To
fill a table, for each charge address a from 1 to 4095, write
`round(2^16 · C_i / a)`, saturated to 16 bits, where C_i is for example
`G·cos θ / (k·M)` for the I term of a single BPM.

## Fixed-point details

* Samples are 13-bit after the LSB is dropped. Baseline-corrected samples are
  14-bit. Integrals are 18-bit, enough for 15 full-scale samples.
* Products are 34-bit and their sum is 36-bit. The right shift by 16 floors
  (it is an arithmetic shift). The result after the offset is clipped to
  −8192 … 8191. `SATCNT` counts the clipped kicks.
* The q pulse is negative-going, so the table address is −q. Positive q gives
  address 0. A magnitude above 4095 uses entry 4095.

## How far it can be trusted, and where it departs

Every module has a self-checking testbench in `tb/`. Each compares against
values computed independently in the bench. `tb_font_fb_top` runs the whole
design at its default parameters, including the real 3099-clock serial bit
time. It configures the firmware over the serial line, loads the tables and
fires synthetic two-bunch trains. It checks the DAC word and the exact clock
edge at which it appears for these cases:

* single-BPM feedback with 1, 10 and 15 samples (all at the same edge);
* two-BPM feedback;
* constant drive, with and without added delay;
* feedback off, and per-train toggling;
* saturation and charge clamping;
* the amplifier gate, trim values and waveform read-back.

`tb_workloads` runs the measurement scans of the published system through
the same top level, with a short serial bit time:

* a latency scan, in which a constant 2000-count kick is moved by 0 to 40
  added cycles and must move by exactly one cycle per added cycle. The kick
  is toggled off and on for sequential triggers, as when the unkicked trains
  serve as a running baseline;
* a kicker calibration scan, in which the constant drive is stepped from
  −8000 to 8000 counts;
* an integration scan from 1 to 15 samples, in which every kick must leave at
  the same cycle;
* two-BPM trains using IPA and IPC;
* the full 164-sample window, and a shorter window set at run time.

Departures from the published system, or points it does not settle:

* **Kicker DAC interface.** The published board drives the kicker through a
  14-bit LTC2624, which is a serial DAC. A serial transfer of a 24- or 32-bit
  frame would alone take longer than the whole published latency allows. Here
  the DAC word is a parallel 14-bit output. The serialiser and the DAC chip
  are outside this RTL.
* **Clock domains.** The board's ADCs are in three separately clocked banks.
  Here they are assumed to be in phase with one fabric clock.
* **Trim DACs.** Only their settings are held. Their serial interface is not
  built.
* **Meaning of the four multiplexers.** The published text says four
  multiplexers select among three BPMs, singly or in pairs. Reading them as
  I/Q of two inputs, matching the four tables, is this design's
  interpretation.
* **Window length.** It can be set at run time, but only up to 164
  samples. The waveform buffer is sized for 164 samples. The published
  maximum is not stated.
* Table depth and width, the pipeline depths, the output format, the hold
  length, trigger handling (edge-triggered, re-triggers ignored during a
  window), the register map and the serial protocol are all this design's own.

## Simulating

Each testbench is self-contained and prints
`TB_RESULT checks=N failures=M`. With plain verilator:

    verilator --binary --timing -Wno-fatal --top-module tb_font_fb_top -y rtl -y tb +libext+.sv \
        rtl/font_pkg.sv tb/tb_font_fb_top.sv && obj_dir/Vtb_font_fb_top

Replace the top module and the file for any other bench (`tb_fb_calc`,
`tb_sample_window`, …). The full-size end-to-end bench takes about ten seconds.
`tb_uart` overrides `CLKS_PER_BIT` to 16 to keep its loopback short.
