# TIGER digital back-end: time and charge readout for GEM detector strips

TIGER is a 64-channel mixed-signal front-end chip for the cylindrical
triple-GEM inner tracker of the BESIII experiment. For every strip hit
it must report *when* the signal crossed threshold, to well under 10 ns,
and *how much charge* it carried (1 to 50 fC), because the tracker uses
charge centroids and micro-TPC track reconstruction rather than binary
hit patterns. Each channel has to sustain 60 kHz of hits within
10 mW.

This repository holds synthesizable SystemVerilog for the digital part of
such a chip, the part that turns discriminator edges and analog-buffer
comparisons into time-stamped event words and ships them off-chip, plus
behavioural models of the analog parts so that the whole chain can be
simulated. The analog front-end (charge amplifier, shapers, discriminators,
threshold DACs, TACs, sample-and-hold, Wilkinson ramp and comparator,
test-pulse generator, bias, LVDS pads) is outside the RTL: the top module
exposes its control and result signals as ports.

## Channel: two branches, four buffers

A charge amplifier feeds two shapers. The fast **T-branch** (50 ns
peaking) is used for timing, and the slow **E-branch** (160 ns peaking)
for charge. Each shaper drives a discriminator with its own 6-bit
threshold code (`vth_t1`, `vth_t2`).

Time is measured in two parts:

* **Coarse time.** A single 16-bit counter on the 160 MHz master clock
  (`coarse_counter`, 6.25 ns per count) is shared by all channels.
* **Fine time.** When the trigger fires, a time-to-analog converter (TAC)
  discharges a capacitor with a constant current. It stops at the next
  clock edge. That voltage moves onto a capacitor four times larger, which
  is then recharged with a current 32 times smaller. Recharging therefore
  takes 128 times the original interval, and `wilkinson_counter` counts
  that time in master-clock cycles until the latched comparator fires.
  One fine count is 6.25 ns / 128 ≈ 49 ps, and the result is 10 bits.

The hit time is therefore

    t_hit = tcoarse * 6.25 ns  -  tfine * 6.25 ns / 128

where `tcoarse` is the count right after the clock edge that ended the
discharge. Gain and offset of each TDC vary from channel to channel, so
in practice they are calibrated off-chip.

Charge is measured in one of two **modes**, set per channel:

* **S/H mode.** A sample-and-hold cell follows the E-shaper during a
  window of `sh_window` clock cycles. The window opens when the T trigger
  is seen. The held voltage is then digitised by the same Wilkinson ADC
  scheme, giving `efine`, and `ecoarse` records when the window closed
  (`tcoarse + sh_window + 1`).
* **ToT mode.** The E-branch also gets a TAC. It is armed once the
  E-discriminator has gone high and fires on its falling edge. `ecoarse`
  and `efine` then time the trailing edge, and
  `ToT = (ecoarse - tcoarse)*6.25 ns - (efine - tfine)*6.25 ns/128`.

A conversion can take up to 1023 cycles (6.4 µs). That is long compared
with the 16.7 µs mean spacing of hits at 60 kHz, so every branch has
**four** TACs (and four S/H cells) sharing one ADC. `channel_ctrl` uses
them as a ring, so that capture, conversion and output of different hits
overlap:

| stage | what happens | signals |
|---|---|---|
| arm | buffer `arm_sel` is free and the trigger source is low | `trig_t = armed & source` |
| capture | T edge seen through a 2-flop synchroniser; `tcoarse` stored; S/H window or ToT wait | `sh_sample`, `trig_e` |
| convert | both ADCs run on buffer `conv_sel` until both comparators fire; then a one-cycle reset of that buffer | `conv_en`, `comp_out_*`, `tac_rst` |
| output | event offered to the global controller with valid/ready | `evt_valid`, `evt_ready` |

Each stage handles buffers strictly in order 0,1,2,3,0,…. A trigger edge
that arrives while the next buffer is still occupied is dropped, and the
next event carries the `lost` flag. In ToT mode, if the trailing edge does
not come within `TOT_TIMEOUT` (1023) cycles, the hit is closed with the
`timeout` flag. The trigger source can be switched from the
discriminators to the chip's test-pulse input (`tp_tdc`). Separately, the
test pulse can be routed to the channel's front-end (`tp_fe`), which
exercises the whole analog chain.

Timing of the channel: tcoarse = coarse count one cycle after the clock
edge following the trigger. The capture state machine starts 2 cycles
after that edge. The conversion starts at the earliest one cycle after
capture ends, and the event becomes valid 2 cycles after the slower
comparator fires.

## Event word

Each hit becomes one 64-bit word (`tiger_pkg::event_t`), MSB first:

| bits | field | meaning |
|---|---|---|
| 63:58 | channel | 0..63 |
| 57:56 | tac | buffer that held the hit |
| 55:40 | tcoarse | coarse time of the T trigger |
| 39:30 | tfine | T fine value |
| 29:14 | ecoarse | end of S/H window, or ToT trailing edge |
| 13:4 | efine | S/H amplitude, or fine value of the trailing edge |
| 3 | mode | 1 = ToT, 0 = S/H |
| 2 | lost | one or more triggers were dropped before this hit |
| 1 | timeout | ToT trailing edge not seen |
| 0 | spare | 0 |

## Readout: data push over two 8B/10B links

No trigger is needed to read the chip out: every digitised hit is pushed
out. `global_ctrl` polls the 64 channels round-robin, starting after the
channel it served last. It accepts at most one event per cycle into a
16-word FIFO. While the FIFO is full, channels keep their events in their
own buffers.

The FIFO head goes to whichever of the two `tx_link`s is starting a new
frame. A link sends an event as eight 8B/10B data symbols (`enc8b10b`,
the standard code with running disparity). When there is nothing to send
it emits the K28.5 comma. During **TX training** it sends nothing but
commas, so the receiving FPGA can find the symbol boundaries; training is
on after reset. A receiver recovers events by counting eight data symbols
after any comma.

Each link puts out 2 bits per clock (`tx[l][1]` first), for a DDR LVDS
driver: 320 Mb/s per link. At 60 kHz on all 64 channels the two links
carry 307 Mb/s of symbols out of 640 Mb/s.

## Configuration and upset protection

`spi_config` is a slave for a 10 MHz SPI-like port. Its pins are
oversampled by the 160 MHz clock, so there is no second clock domain.

* **Frame.** While `cs_n` is low: one command byte
  `{write, addr[6:0]}`, then 24 data bits. Mode 0, MSB first.
* **Addresses.** 0–63 are the channel registers (`ch_cfg_t`), 64 is the
  global register (`glb_cfg_t`) and 65 is a read-only count of corrected
  upsets.
* **Write.** The register is written after the 32nd bit. A shorter frame
  writes nothing.
* **Read.** Data appears on `miso` from the 9th bit on.

| register | fields |
|---|---|
| channel | `vth_t1[5:0]`, `vth_t2[11:6]`, `enable[12]`, `tp_fe[13]`, `tp_tdc[14]`, `mode[15]`, `sh_window[23:16]` |
| global | `training[0]`, `tx_enable[1]`, `dac_range[3:2]`, `tp_amp[9:4]` |

After reset, channels are disabled with a 32-cycle (200 ns) S/H window,
and the links are in training.

Every register is a `hamming_reg`. The 24 data bits are stored as a 29-bit
Hamming single-error-correcting word, and the word is decoded every cycle.
A flipped bit is corrected at the output and also written back, so a
second upset later finds a clean word.

## Modules

| file | role |
|---|---|
| `rtl/tiger_pkg.sv` | sizes, `event_t`, `ch_cfg_t`, `glb_cfg_t` |
| `rtl/coarse_counter.sv` | 16-bit coarse time |
| `rtl/wilkinson_counter.sv` | ADC conversion counter |
| `rtl/channel_ctrl.sv` | one channel (two `wilkinson_counter`s inside) |
| `rtl/hamming_reg.sv` | SEU-corrected register |
| `rtl/spi_config.sv` | configuration port and register file |
| `rtl/enc8b10b.sv` | 8B/10B encoder |
| `rtl/tx_link.sv` | one serial link |
| `rtl/global_ctrl.sv` | arbiter, FIFO, two links |
| `rtl/tiger_top.sv` | the chip's digital part |

Parameters with their defaults: `NCH = 64`, `FIFO_DEPTH = 16`,
`TOT_TIMEOUT = 1023`, `BPC = 2` (link bits per clock). At full size the
design synthesises to about 22 k flip-flops, most of them in the 64
channels and the 65 protected registers.

## What follows the published design and what does not

These points follow the chip as published: 64 channels with dual T/E
branches; 6-bit thresholds; the 16-bit coarse counter at 160 MHz;
10-bit fine values; the 128× Wilkinson interpolation; four buffers per
branch with one shared ADC; the S/H and ToT modes; the user-set S/H
window; the test pulse used either at the front-end or directly as TDC
trigger; data push; two 8B/10B links with TX training; a 10 MHz
configuration port; and Hamming-based upset protection.

The following are this implementation's own choices, where the
description stops:

* the in-order buffer policy, synchronisers, lost / timeout flags and
  ToT timeout;
* the rule that ToT uses the E-discriminator's trailing edge;
* the event word layout, the register map and the SPI frame;
* round-robin arbitration, the FIFO depth and the link framing;
* the 2-bit-per-clock line rate;
* Hamming protection applied to the configuration registers only (the
  data-path flip-flops are not protected here).

The original back-end is derived from an existing PET readout chip, and
its real formats differ from these.

The analog models are idealised. The TAC model has no gain or offset
error, and the S/H model holds an integer in ADC counts instead of a
voltage. Because of this, the testbenches check the digital logic
exactly, but they say nothing about analog performance.

## Simulating

All testbenches are self-checking and end with a line
`TB_RESULT checks=N failures=M`. Build one with plain Verilator, for
example:

    verilator --binary --timing --assert -Irtl -y rtl -y tb \
        rtl/tiger_pkg.sv tb/ref8b10b_pkg.sv tb/tiger_top_tb.sv \
        --top-module tiger_top_tb -Mdir obj && obj/Vtiger_top_tb

| testbench | covers |
|---|---|
| `coarse_counter_tb`, `wilkinson_counter_tb`, `hamming_reg_tb`, `enc8b10b_tb`, `tx_link_tb`, `spi_config_tb`, `global_ctrl_tb`, `channel_ctrl_tb` | each block against independently computed values |
| `tiger_top_tb` | full-size chip, default parameters: configuration over SPI, 200 random hits in both modes, test pulse, ToT timeout, buffer overflow, an injected configuration upset; every event decoded from the links and compared field by field (~1 s) |
| `tiger_rate_tb` | full-size chip at 60 kHz per channel for 600 µs: 2296 hits gave 2295 events plus one flagged lost trigger, with 48 % link load (~4 s) |

The helper models in `tb/` are:

* `tac_sh_model`: one branch's four TACs, S/H cells and comparator;
* `link_rx_model`: comma alignment and 8B/10B decoding of a link;
* `ref8b10b_pkg`: a reference encoder/decoder;
* `spi_master_model`: the configuration master.

Expected fine values are floor(128 × (next clock edge − trigger) / 6.25 ns),
checked to ±1 count. The `tiger_rate_tb` figure shows that, with S/H
amplitudes spread over the full 10-bit range, four buffers absorb the 60 kHz
design rate except for rare bursts.
