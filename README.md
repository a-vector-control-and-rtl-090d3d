# Multi-cavity LLRF field control FPGA: vector control and waveform acquisition

A single klystron drives up to 24 superconducting 1.3 GHz cavities. The
controller cannot regulate each cavity on its own. Instead it regulates the
**vector sum** of all cavity probe signals. This FPGA does that job, and it
also records what happened. Every cavity probe arrives as a 13 MHz IF
signal. The FPGA samples all of them synchronously and turns each into
complex base band (I/Q) with its own magnitude and phase calibration. It sums
the probes into one vector, compares that vector with a set-point table, and
drives the klystron through a PI controller, two mode-rejection notches and
a complex upconverter. While the RF pulse is on, it stores every
channel's I/Q waveform in an external SDRAM, and the host reads them
between pulses (5 Hz repetition). A built-in base-band cavity simulator,
output on spare DACs, lets the whole loop be closed and tested without a
cavity.

The RTL is written in synthesizable SystemVerilog (IEEE 1800-2017). It
describes one field-control module (33 ADC channels, 4 DACs). The top
module is `llrf_top`.

## 1. The clock plan and why 101 table entries

Everything is derived from the 1.3 GHz LO:

| clock | frequency | used by |
|---|---|---|
| GlobalClock `clk` | fs = 1313/21 MHz = 62.52 MHz | ADC sampling, all signal processing, acquisition latching |
| SdramClock `clk2x` | 2 fs, same PLL, edges aligned with `clk` | acquisition FIFO, memory arbiter, host port, table write ports |
| SerialClock `sclk` | independent (about 47 MHz) | the four serial lanes to the DSP |
| `bit_clk` | 12 fs, phase-locked to `clk` | LVDS ADC deserializers |

The IF is 13 MHz, and 13 / (1313/21) = 273/1313 = **21/101**. So 101
consecutive samples hold exactly 21 IF cycles. A 101-entry cosine/sine
table, indexed by a counter that steps by one every clock (mod 101),
therefore reproduces the IF phase exactly and never drifts. That is why every
NCO table in the design has 101 entries. The table content is not a bare
cosine. The host (or the DSP) writes `g·cos(2π·21·n/101 + φ)`, so each
channel gets its own gain g (0 to about 2) and phase φ. This is how cavities
are calibrated into the vector sum, and how LO drift is corrected later (see
section 7).

`clock_divider` makes the slower rates as one-clock **enables** (not
clocks). All of them come from a single mod-960 counter:

| enable | ratio | rate | meaning |
|---|---|---|---|
| `en_spff` | fs/15 | 4.17 MHz | step of the set-point/feed-forward tables |
| `en_2m` | fs/30 | 2.08 MS/s | fast acquisition channels |
| `en_1m` | fs/60 | 1.04 MS/s | slow acquisition channels |
| `en_cw` | fs/960 | 65 kHz | end of a CW averaging block (16 slow samples) |

The pulse trigger restarts the counter, so the enables have the same phase
relative to every pulse.

## 2. Signal chain (GlobalClock)

```
adc14 ─┐                                  ┌─ bb_i/q[0..32] ──────────────► acquisition, CW averages
lvds ──┴► adc_capture ─► downconverter ───┤
                         (33 × ddc_channel)└─ vs_i/q (channels 1..24) ─┐
                                                                       ▼
 sp_ff_tables ── sp, ff ─────────────────────────────────────► pi_controller
                                                                       │ u
                      fixed notch (7π/9) ◄─────────────────────────────┘
                              │
                      variable notch (8π/9) ─► drive ─► upconverter ─► DAC 0/1 (transmitter)
                                                  │
                                                  └► cavity_simulator ─► upconverter ─► DAC 2/3
```

* **adc_capture / lvds_deser.** Channel 0 is the 14-bit reference ADC.
  Channels 1 to 32 come from four 8-channel 12-bit ADCs with serial LVDS
  outputs. Each ADC sends 12 bits per sample, MSB first, one bit per
  `bit_clk`, with a frame mark on the MSB. The 12-bit values are
  multiplied by 4 so that all 33 channels share one 14-bit full scale.
* **ddc_channel.** Each channel computes `I = x·cos`, `Q = −x·sin` (the
  product is shifted right by 15, so a unit-gain table returns the IF
  amplitude in ADC units). The mixing leaves a product at twice the IF,
  42/101 fs. Two filters remove it:
  * A single-stage CIC, which here is a non-decimating moving sum of 12
    samples. Its fifth null, at 5/12 fs, lies within 0.2 % of 42/101 fs.
  * A 3-tap FIR [1 2 1]/4, which removes what is left near fs/2.

  The latency is 4 clocks.
* **Vector sum.** The vector sum is the sum of channels 1 to 24, shifted
  right by 5 and saturated to 16 bits. Channel 0, the reference, is not in
  it. For cryomodule 1, which has 8 cavities, the unused probe channels are
  given zero-gain tables.
* **sp_ff_tables.** Four 8192 × 16 tables hold the set-point (I, Q) and the
  feed-forward (I, Q). The host writes them between pulses. The trigger
  starts playback at entry 0, and the entry advances on each `en_spff`, so
  8192 entries last 8192·15/fs = 1.97 ms. That is also the length of the
  acquisition. The RF pulse itself ends after entry `rf_last` (register 11,
  default 8191). With a smaller value, for example 5000 for 1.2 ms, the
  drive stops and the acquisition goes on recording the free decay of the
  cavity. `active` is high during the RF pulse. In CW mode, entry 0 is held and
  `active` stays high.
* **pi_controller.** It computes `e = sp − vs` and
  `u = ff + fb·(kp·e/16 + s/4096)`, with the integrator update
  `s ← s + ki·e − kpole·s/2^24`. The leak term `kpole` moves the integrator
  pole from DC to `kpole/2^24·fs/2π`. The reset values kp = 7200,
  ki = 1311 and kpole = 506 correspond to a proportional gain of 450, an
  integral gain of 2·10⁷ rad/s and a 300 Hz pole, which is the closed-loop
  setting the design was characterised with. With the loop open (`fb` = 0)
  the drive is the feed-forward alone. Outside a pulse the drive is zero.
* **notch_filter** (two instances). Each is a biquad
  `y = b0(x + x₂) + b1·x₁ − a1·y₁ − a2·y₂` with zeros on the unit circle
  and poles at r = 0.998, applied to I and Q separately. The coefficients
  are 26-bit Q2.24 values. With 16 fraction bits the rounding of a1 alone
  let about 6 % of the mode through.
  * The fixed instance removes the 7π/9 passband mode, taken as 2.9 MHz
    from the carrier.
  * The host-programmable instance defaults to the 8π/9 mode at 0.8 MHz.
    Both offsets are typical values for 9-cell TESLA cavities.
* **upconverter.** It computes `dac_a = (I·cos − Q·sin)/4` and
  `dac_b = (I·sin + Q·cos)/4`, with host-written 101-entry tables,
  saturated to 14 bits. The latency is 2 clocks.
* **cavity_simulator.** This is a first-order low-pass filter,
  `y ← y + k(x − y)/2^24`, on I and Q, driven by the drive signal. Its half
  bandwidth is `k·fs/(2π·2^24)`; k = 337 gives 200 Hz. It is output on
  DAC 2/3 through a second upconverter. If DAC 2 is looped back into the
  probe inputs, the complete feedback loop runs on real hardware (or in the
  end-to-end testbench) without a cavity.

### Loop phase

The delay from the DAC back through the converters, capture and
downconversion rotates the measured vector. The design does not compensate
for this in logic. Instead, the phase of the tables takes it out: the
downconverter tables, or the simulator's upconverter tables.
`tb_llrf_top` shows the procedure:
1. Open the loop in CW mode.
2. Apply a feed-forward step.
3. Read the angle of the vector sum.
4. Rewrite one table pair rotated by that angle.

In simulation the loop phase measured 61° before this correction and 0°
after it.

## 3. Waveform acquisition and the SDRAM layout

This is the part that takes the most care. A 1 MS/s sample period is
60 fs clocks. In that time the acquisition must store:

* 25 complex slow channels (reference plus 24 probes), that is 50 words at
  fs/60;
* 8 complex fast channels, that is 16 words at fs/30, so 32 words per
  1 MS/s period.

The fast channels are, in this order, I then Q each: the vector sum, the
set-point, the error, the PI output, the fixed-notch output, the drive, the
cavity simulator and the feed-forward.

That is 82 words per period. The SDRAM side runs at 2 fs, which gives
120 word slots per period, so the port is about 68 % busy.

**Latching.** All channels are latched on the same `clk` edge. `daq`
arms on the trigger and starts on the next `en_1m`. On every `en_2m` after
that it latches the fast words, and on every `en_1m` also the slow words.
Each latch toggles a bit. `clk` and `clk2x` come from one PLL with aligned
edges, so one `clk2x` register is enough to see the toggle. No
synchronizer chain is needed.

**Frames.** Each toggle starts one **frame** on `clk2x`. A frame is 41
words: the 16 fast words, then one half of the slow words. The first half
(words 0 to 24) goes in the frame that starts a 1 MS/s period, and the
second half (words 25 to 49) in the frame in between. The frame is pushed
into a 256-entry FIFO (`sync_fifo`), one word per `clk2x` cycle, together
with its address. It takes 41 of the 60 `clk2x` cycles before the next
frame starts, so the FIFO absorbs only the SDRAM controller's stalls.

**Addresses.** A 1 MS/s sample period therefore fills 82 consecutive
addresses:

```
address 82n + 0  .. 82n + 15   fast sample 2n    (words 0..15)
address 82n + 16 .. 82n + 40   slow sample n     (words 0..24: ref I, ref Q, probe1 I, ...)
address 82n + 41 .. 82n + 56   fast sample 2n+1  (words 0..15)
address 82n + 57 .. 82n + 81   slow sample n     (words 25..49)
```

In general:
* slow word w of sample n is at `82n + 16 + w` (w < 25) or
  `82n + 57 + (w − 25)`;
* fast word f of sample m is at `41m + f`.

A pulse stores 2·2048 frames, which is 2048 slow samples per channel
(1.97 ms) and 167,936 words. Then `done` pulses.

**Diagnostic mode** (register 0, bit 2). The trigger starts a run that
stores one selected raw channel at the full rate, one word per `clk`, from
address 0. The selectable channels are ADC 0 to 32 (select 0 to 32) and
DAC 0 to 3 (select 33 to 36). The run length is register 10. The value 0
means 2^25 words (32 M words, the whole 64 MB SDRAM). This uses 1 of every
2 SDRAM slots.

**CW mode** (register 0, bit 0). There are no pulses, and the SDRAM is
not written. `cw_averager` adds each of the 66 acquisition words over 16
samples at fs/60. At each fs/960 it stores the averages (sum/16) into a
66-word dual-port RAM that the host reads, and `cw_updated` pulses.

**memory_interface.** This arbitrates the single word port of the SDRAM
controller between three users:
1. the acquisition stream, which always wins;
2. host reads and writes through the parallel port;
3. the serial controller's reads.

It allows one outstanding read. Read data comes back on `mem_rvalid` and
goes to whoever issued the read. The SDRAM controller itself is not part of
this RTL. Its word port (`mem_req/we/addr/wdata`, `mem_gnt`,
`mem_rvalid/rdata`) is a port of `llrf_top`, and it must accept a write on
at least 82 of every 120 `clk2x` cycles during a pulse. If it does not,
`daq_overflow` is set.

## 4. Host port (`parallel_port`, SdramClock)

The host (the VXI slot-0 controller or the DSP) uses a 32-bit
request/acknowledge bus:
1. It holds `h_req`, `h_we`, `h_addr` and `h_wdata` until `h_ack`.
2. `h_rdata` is valid with `h_ack`.
3. It drops `h_req` for at least one cycle before the next access.

The address is a 28-bit word address:

| `h_addr` | target |
|---|---|
| bit 27 = 1 | SDRAM word `h_addr[24:0]` (16 bits) |
| [27:24] = 0 | registers 0..11 |
| [27:24] = 1 | NCO table `[13:7]`, entry `[6:0]` (write only). Tables 0..65: downconverter channel c cos = 2c, sin = 2c+1. Tables 66/67: drive upconverter. Tables 68/69: simulator upconverter |
| [27:24] = 2 | SP/FF table `[14:13]` (0 SP I, 1 SP Q, 2 FF I, 3 FF Q), entry `[12:0]` (write only) |
| [27:24] = 3 | CW average of acquisition word `[6:0]` (0..49 slow, 50..65 fast) |

| reg | contents | reset |
|---|---|---|
| 0 | bit 0 CW mode, bit 1 loop closed, bit 2 diagnostic mode | 0 |
| 1 | diagnostic channel select | 0 |
| 2, 3, 4 | kp, ki, kpole | 7200, 1311, 506 |
| 5..8 | variable notch b0, b1, a1, a2 (26-bit, read sign-extended) | 8π/9 notch |
| 9 | cavity simulator k | 337 (200 Hz) |
| 10 | diagnostic depth (0 = 2^25) | 0 |
| 11 | last SP/FF entry of the RF pulse (`rf_last`) | 8191 |

Registers are meant to be changed only between pulses. They are used in
the `clk` domain without synchronizers. The NCO and SP/FF tables are
dual-clock RAMs written from `clk2x` and read on `clk`.

## 5. Serial link to the DSP (`serial_port_ctrl`)

After each pulsed acquisition, the controller reads the first 64 slow
samples back from the SDRAM. Each sample is all 50 reference and probe I/Q
words, 3200 words in total. It packs them four at a time into an
`async_fifo` (Gray-coded pointers, two-flop synchronizers) that crosses to
SerialClock. There, word 4j+k goes out on lane k, 16 bits MSB first, and
`ser_fs` is high with the first bit of each group of four. At about 47 Mb/s
the transfer takes about 0.27 ms.

## 6. Number formats

| signal | format |
|---|---|
| ADC samples | 14-bit two's complement (12-bit LVDS channels × 4) |
| NCO tables | 18-bit, 2.16 (gain up to ~2) |
| base band, tables, acquisition words | 16-bit two's complement |
| notch coefficients | 26-bit, Q2.24 |
| DAC words | 14-bit two's complement |

All arithmetic saturates where it narrows.

## 7. LO drift compensation (outside the FPGA)

The DSP computes the drift from the 64-sample subset it receives after each
pulse. If the reference phase is not zero, it rotates the NCO tables of the
reference, the cavity downconverters and the drive upconverter, and
rewrites them through the host port before the next pulse. The FPGA
supplies the data and accepts the new tables. The algorithm itself is
software and is not here.

## 8. Modules

| file | module |
|---|---|
| `llrf_pkg.sv` | widths, host address regions, register struct |
| `clock_divider.sv` | fs/15, /30, /60, /960 enables |
| `lvds_deser.sv`, `adc_capture.sv` | ADC front end |
| `dp_ram.sv` | dual-clock RAM (all tables, CW memory) |
| `ddc_channel.sv`, `downconverter.sv` | 33-channel downconversion and vector sum |
| `sp_ff_tables.sv` | set-point/feed-forward tables |
| `pi_controller.sv`, `notch_filter.sv` | controller |
| `upconverter.sv`, `cavity_simulator.sv` | output and simulator |
| `daq.sv`, `sync_fifo.sv`, `cw_averager.sv` | acquisition |
| `memory_interface.sv`, `parallel_port.sv` | SDRAM arbitration and host port |
| `async_fifo.sv`, `serial_port_ctrl.sv` | DSP serial link |
| `llrf_top.sv` | the FPGA |

Outside the RTL, and shown as ports of `llrf_top`: the PLLs, the SDRAM
controller and SDRAM, the ADC and DAC chips, the VXI interface chip and the
DSP.

## 9. Simulation

Each module has a self-checking testbench `tb/tb_<module>.sv`. It prints
`TB_RESULT checks=N failures=M` and finishes. With Verilator 5:

```
verilator --binary --timing -Wno-fatal --top-module tb_llrf_top \
    -y rtl -y tb +libext+.sv rtl/llrf_pkg.sv tb/tb_llrf_top.sv
./obj_dir/Vtb_llrf_top
```

`tb_llrf_top` runs the FPGA at full size (8192-entry tables and
2048-sample acquisition) in about 15 s of host time. The TB feeds the
simulator's DAC output back into the 24 probe channels and the drive into
the other eight. It models the SDRAM controller with random grants. It
then goes through these steps:
1. register checks;
2. loading all 70 NCO tables;
3. loop-phase calibration in CW mode;
4. CW average readback;
5. a closed-loop pulse with the 200 Hz simulator, with feed-forward set
   20 % short on purpose. At the end of the pulse the stored vector sum is
   exactly at the set-point, and all 167,936 words sit at distinct
   addresses;
6. the serial transfer, compared word for word with the SDRAM contents;
7. host SDRAM reads;
8. a pulse whose RF ends at 1.2 ms. The stored drive is zero after that
   point. The stored cavity field decays by the expected factor
   (0.406 over the last 0.72 ms, for a 0.8 ms time constant);
9. a diagnostic run.

Each mechanism is counted, and the test fails if any count is zero.

## 10. Where this departs from the published design, and what is assumed

The published description gives:
* the block structure;
* the channel counts;
* the table sizes and formats;
* the clock ratios;
* the acquisition rates and depths;
* the controller type and the test settings.

Everything below is this design's own choice, and it is where a user
should look first:

* The CIC length (12), the FIR taps, the Q sign convention and the
  vector-sum scaling (÷32).
* The PI number formats, the integrator clamp, and the gating with
  `active`.
* The notch form, its pole radius and the two mode offsets (0.8 and
  2.9 MHz). The published text does not say which notch is fixed. Here the
  fixed one is 7π/9.
* The choice of fast tap points. The published design says only that there
  are the vector sum plus seven taps.
* The frame layout and addresses in SDRAM, and the FIFO depth.
* The host bus protocol, the address map and the register layout.
* The serial framing, and the choice of the first 64 samples.
* LVDS format: single data rate, frame-marked, bit clock phase-locked at
  12 × fs.
* Converter DAC scaling (÷4) and saturation.
* The CW-mode behaviour of the tables (entry 0 held) and CW averaging of
  all 66 acquisition words.
* The `rf_last` register that ends the RF pulse before the acquisition
  ends. Published pulse records show the drive stopping at 1.2 ms and the
  field decaying until 2 ms, but not how the end is set.

The design does not include two published options:
* the 3 fs FIFO clock for up to about 180 acquisition channels;
* a general channel count of up to 100. The acquisition channel set is
  fixed at 50 slow + 16 fast words.

The HINS clocking (fs = 338/6 MHz, decimation 52) would need the divider
parameters set to 52/26 and a different NCO table length, and it was not
tried.
