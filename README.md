# TIGER digital core: time and charge readout for a 64-channel GEM front-end

TIGER is a mixed-signal front-end ASIC for the cylindrical triple-GEM inner
tracker of the BESIII spectrometer. Each of its 64 channels takes the charge of
one detector strip and measures two things: **when** the signal crossed a
threshold (a time stamp with sub-50 ps binning, built from a 160 MHz coarse
counter plus an analogue time interpolator), and **how much** charge it carried.
The charge comes either from the time-over-threshold (ToT) or from a 10-bit
digitisation of the peak amplitude, which a sample-and-hold (S&H) captures. A
detector with about 10 000 strips can then work out a charge centroid, or
use the drift times as a small TPC, from a fully digital, 8b/10b-encoded output.

This repository holds synthesizable SystemVerilog for the **digital half** of
such a chip: the per-channel control logic with its four event buffers, the
Wilkinson conversion counters, the back-end that collects the events and sends
them out over one to four serial links, the SPI configuration port with
Hamming-protected registers, triple-modular-redundant FSM state, and the
calibration pulser. The analogue half is described by its interface only:
the amplifier, the shapers, the discriminators, the interpolators, the S&H
capacitors, the ramps, the bias DACs and the LVDS drivers. A behavioural model of
it, used by the testbenches, is in `tb/analog_channel_model.sv`.

Top module: `tiger_top` (`rtl/tiger_top.sv`). Shared types and functions:
`rtl/tiger_pkg.sv`.

---

## 1. One channel, one hit: the four-buffer life cycle

This is the part of the design that takes the most care.

The analogue channel has two branches. The *fast* shaper (60 ns peaking) feeds a
discriminator whose output is `trig_t`. The *slow* shaper (170 ns peaking) feeds
a second discriminator, whose output is `trig_e`, and a sample-and-hold. A hit's analogue
information is held in one of **four buffers**. Each buffer holds a time
interpolator for the `trig_t` edge, a second interpolator for the `trig_e` edge,
and one S&H capacitor. The buffer that catches the next hit is the one
`buf_sel` points to.

`channel_ctrl` takes each buffer through five states (held in TMR registers):

```
 FREE ──trig_t rises──▶ WAIT_E ──E phase ends──▶ WAIT_CONV ──ADCs free──▶ CONV
  ▲                                                                        │
  └──────────── back-end reads the event (ev_ack) ◀── DONE ◀──both ADCs done┘
```

* **Fast trigger** (rising edge of `trig_t`, sampled at the clock): the coarse
  time is stored as `t_coarse` and `buf_sel` moves on to the next buffer. If
  that buffer is not FREE, all four are busy: the hit is dropped and `lost`
  pulses. The top counts these in `lost_hits`.
* **End of the E phase** depends on the channel mode (`mode_sh` in the channel
  word):
  * *ToT mode, double threshold*: the falling edge of `trig_e` ends it and
    stores `e_coarse`. The pair (`t_coarse`+`t_fine`, `e_coarse`+`e_fine`)
    gives the rising edge of the fast signal and the falling edge of the slow
    one. Their difference is the time-over-threshold.
  * *ToT mode, single threshold* (`single_thr` in the channel word): the
    falling edge of `trig_t` ends it instead, so both time stamps come from the
    fast discriminator and the second interpolator measures its trailing edge.
  * *S&H mode*: the buffer's `sh_sample` switch closes on the fast trigger and
    the capacitor follows the slow shaper. After (`sample_time`+1) × 25 ns, which
    is 4 clocks per step at 160 MHz, the switch opens and the capacitor holds the
    value near the peak. `e_coarse` records that moment.
* **Conversion**: the buffers are converted one at a time, in ring order. The
  channel pulses `t_conv` and `e_conv` together, with `conv_slot` naming the
  buffer. The T converter digitises the fast-edge interpolator. The E converter
  digitises the slow-edge interpolator (ToT) or the S&H capacitor (S&H). The same
  E converter thus serves either as a TDC fine-time converter or as the amplitude ADC.
* **Readout**: the oldest DONE buffer is offered on `ev_valid`/`ev`. It stays stable
  until `ev_ack` (an assertion checks this), and is then freed.

The buffers are allocated, converted and read out in the same ring order, so
four pointers (`alloc`, `e`, `conv`, `read`) and a state per buffer are the
whole control. The ToT E phase always closes the oldest buffer still waiting for
it, since one discriminator cannot produce overlapping pulses. The mode bits
are taken per buffer when the hit arrives, so a configuration change never
alters a hit already in flight.

### Wilkinson conversion handshake

A Wilkinson ADC runs a constant-current discharge of the stored voltage. A
comparator stays high while the voltage is above the reference. `wilkinson_adc`
counts, at the system clock, the edges at which that comparator (`t_cmp` or
`e_cmp`) is high. The conversion ends at the first low sample after a high one,
or at 1023 (saturation). If the comparator never rises within 1024 clocks the code
is 0. A conversion therefore takes the ramp length plus about 5 clocks, at most
6.4 µs. The fine time in picoseconds comes from the code and a per-interpolator
gain and offset. Those are calibrated off-chip by sweeping the test pulse across
one clock period. The chip only delivers the raw codes.

## 2. Back-end: from 64 channels to the links

```
64 × channel_ctrl ─ev_valid─▶ event_arbiter (round-robin) ─▶ sync_fifo (16 × 64 bit)
   ─▶ frame_tx ─4 lanes─▶ 4 × enc8b10b ─▶ 4 × serializer ─▶ tx_bits[link][3:0]
```

* `event_arbiter` grants one requesting channel per clock, round-robin. The grant
  is taken only while the FIFO has room: a full FIFO stalls the channels, which keep
  their events in their buffers. Only new hits on a channel with four full buffers
  are lost.
* Each event becomes a 64-bit word (`event_t`, MSB first):

  | bits | field |
  |---|---|
  | 63:58 | channel |
  | 57:56 | buffer |
  | 55 | mode (1 = S&H) |
  | 54:39 | t_coarse (16 bit, 160 MHz) |
  | 38:23 | e_coarse |
  | 22:13 | t_fine (10-bit code) |
  | 12:3 | e_fine: E fine time (ToT) or amplitude (S&H) |
  | 2:0 | zero |

* `frame_tx` sends each event as a **frame of 9 characters**: K27.7 (start), then
  the 8 bytes, most significant first. Every *symbol period* all links send one
  character together. On N active links (N = 1, 2 or 4), link j carries frame
  character `pos + j`. Characters past the end of the frame, on inactive links, or
  with no event pending, are K28.5 commas. A frame thus takes 9, 5 or 3
  periods. A receiver aligns on the K28.5 comma, decodes the links in lock-step,
  and reads the characters of a period in link order.
* Each `serializer` hands **four line bits per 160 MHz clock** to the link output
  stage (`tx_bits[l][3]` first, i.e. one bit per 1.5625 ns quarter period). That
  stage is a 320 MHz DDR pad cell and sits outside this RTL, like the LVDS driver.
  The line rate is set by `rate`: 2 gives 640 Mb/s (four different bits per clock),
  1 gives 320 Mb/s (each bit sent twice), 0 gives 160 Mb/s (each bit four times).
  The serializer keeps a 32-bit buffer and starts sending once it holds two
  symbols; a rate change empties it.
* The symbol period is 10, 5 or 2.5 clocks for 160, 320 and 640 Mb/s. At 640 Mb/s
  `frame_tx` alternates periods of 3 and 2 clocks.
* `enc8b10b` is the standard IEEE 802.3 code with running disparity, one
  encoder per link. Bit 9 of a symbol (`a`) is sent first.

**Total line rate and event rate** (one frame = 90 line bits):

| links | 160 Mb/s per link | 320 Mb/s per link | 640 Mb/s per link |
|---|---|---|---|
| 1 | 160 Mb/s, 1.78 M events/s | 320 Mb/s, 3.56 M events/s | 640 Mb/s, 7.1 M events/s |
| 2 | 320 Mb/s, 3.56 M events/s | 640 Mb/s, 7.1 M events/s | 1280 Mb/s, 14.2 M events/s |
| 4 | 640 Mb/s, 7.1 M events/s | 1280 Mb/s, 14.2 M events/s | 2560 Mb/s, 28.4 M events/s |

All 64 channels at 100 kHz make 6.4 M events/s (576 Mb/s). That fits on any set-up
with 640 Mb/s or more in total. At 60 kHz per channel, 346 Mb/s is needed.

## 3. Configuration: SPI and Hamming-protected registers

`spi_slave` is an SPI mode-0 slave (MSB first, `spi_csn` active low). The pins are
synchronised to the system clock, so each SCLK phase must last at least four
clocks. A transaction has 24 bits:

```
 [23] 1 = read, 0 = write   [22] 1 = global, 0 = channel   [21:16] address
 [15:0] data (write: on MOSI; read: on MISO, from the 9th SCLK cycle on)
```

`config_bank` stores one 16-bit word per channel and four global words. Each word
is kept as a **(22,16) extended Hamming codeword** (`ham_encode`/`ham_decode` in
`tiger_pkg`). Bits 1..21 follow the classic layout with parity at positions 1,
2, 4, 8 and 16, and bit 0 is the overall parity. The decoded words drive
the chip all the time, so a single upset bit never reaches the logic. A
scrubber visits one word per clock and writes back the corrected codeword.
`cfg_err[0]` (corrected) and `cfg_err[1]` (double error) are sticky until the next
write.

Channel word (`ch_cfg_t`), reset value `0x0010` (enabled, ToT, double threshold):

| bits | field |
|---|---|
| 0 | `mode_sh`: 1 = sample-and-hold, 0 = time-over-threshold |
| 3:1 | `sample_time`: S&H window (n+1) × 25 ns |
| 4 | `enable` |
| 5 | `tp_en`: receives calibration pulses |
| 10:6 | `vth_t`: fast threshold DAC code (to the analogue channel) |
| 14:11 | `vth_e`: slow threshold DAC code |
| 15 | `single_thr`: ToT with the fast discriminator only |

Global words: 0 holds the link set-up (bits 1:0: 0 = 1 link, 1 = 2 links, 2 or 3 = 4 links;
bit 2: DDR; bit 3: doubled transmit clock). The line rate per link is 160 Mb/s
× 2^(bit 2 + bit 3): SDR or DDR at 160 MHz, or at 320 MHz. Bits 7:0 of word 1 hold the test pulse length. Words 2 and 3 are free bias
DAC codes. All of them leave on `glb_cfg_out`, and the channel words on `ch_cfg_out`,
for the analogue periphery.

## 4. Single-event-upset protection

Every FSM state register is a `tmr_reg`: three flip-flop copies, a bitwise 2-of-3
vote, and the next state computed from the voted value. An upset copy is outvoted
at once and overwritten at the next edge. This covers the channel buffer states,
the frame state of `frame_tx`, and the bit counter of `spi_slave`. Data registers
(time stamps, codes, FIFO) are not triplicated. The configuration is protected by the
Hamming code instead.

## 5. Calibration pulses

`calib_pulse` answers a rising edge on `tp_in` with a pulse of (length+1) clocks
on `tp_out`, to every channel whose `tp_en` is set. On the chip that pulse
steps an injection capacitor, and an analogue DAC sets the charge. This is how the
threshold scans (s-curves for noise and baseline) and the TDC calibration are
run.

## 6. How far this follows the chip, and where it is this design's own

Taken from the chip description: 64 channels; fast and slow branches; ToT and
S&H measurement; single or double threshold in ToT; four buffers (quad-buffered TDC and a four-capacitor S&H); S&H
start on the fast trigger with a 25 ns step; a 10-bit Wilkinson ADC shared between
amplitude and slow-edge fine time; a 160 MHz clock; TMR on FSMs; Hamming-encoded
configuration; SPI configuration; 8b/10b output on up to four links in SDR or
DDR; per-channel programmable test pulses.

Chosen here, because the description does not give them: all field widths (16-bit
coarse counter, 3-bit sampling time, 5- and 4-bit threshold codes), the choice
of the fast discriminator for single-threshold ToT, the ring-order buffer
policy, dropping hits when the buffers are full, the conversion handshake and
time-out, round-robin arbitration, the 16-deep FIFO, the event word and frame
format, link striping, the SPI frame, the (22,16) code and the scrubber, and the
test pulse length field.

Known departures:

* **Link output stage.** The RTL runs entirely on the 160 MHz clock and delivers
  four line bits per clock per link. The fast output multiplexer that puts them on
  the wire (320 MHz, DDR) is assumed to be a pad cell. How the chip itself makes
  its 320 and 640 Mb/s rates is not described; the bit repetition used here for
  the lower rates is this design's choice.
* **Discriminator timing.** `trig_t`/`trig_e` are treated as synchronous
  inputs. On silicon they are asynchronous, and the interpolators measure the edge
  against the next clock edge. Here only the conversion of that measurement is
  modelled.
* **Back-end.** The original back-end derives from an existing design for
  medical-imaging chips, which is not described. The arbiter, FIFO and framing
  here are an independent, simple implementation of the same job.
* **Not in RTL:** the amplifier, the shapers, the discriminators, the
  baseline holder, the interpolators, the S&H switches and capacitors, the Wilkinson ramps, the bias
  and threshold DACs, the probing points and the LVDS drivers. So are the readout
  boards and data collectors of the detector system.

## 7. Simulating

Each module has a self-checking testbench `tb/tb_<module>.sv`, which ends by printing
`TB_RESULT checks=N failures=M`. With Verilator 5:

```sh
verilator --binary --timing --assert -Irtl -Itb rtl/tiger_pkg.sv tb/ref8b10b_pkg.sv \
          tb/tb_tiger_top.sv --top-module tb_tiger_top -Mdir obj_top -o sim
./obj_top/sim
```

(The same command works for any `tb_<module>`; files are found via `-Irtl -Itb`.)

* `tb_tiger_top` runs the whole chip at its default size (64 channels). It
  configures it over SPI and fires about 1700 hits. It deserialises and decodes all four
  links and checks every event field against a prediction. It steps through all nine
  link set-ups (1, 2, 4 links × 160, 320, 640 Mb/s) and checks that burst frames follow each other every 90 clocks on
  one SDR link. It makes each mechanism happen (ToT with double and single threshold, S&H, FIFO full, arbitration
  contention, a lost hit, SPI read-back, a test pulse, a corrected configuration
  upset) and counts each one. It runs in a few seconds.
* `tb_tiger_rate` runs all 64 channels at a sustained rate, each firing with a
  random gap around its mean. It runs 100 kHz per channel on one link at
  640 Mb/s (90 % of the link) and 60 kHz per channel on four links at 160 Mb/s,
  625 µs each. It checks that no hit is lost and that every event arrives
  intact. At 100 kHz the event FIFO fills now and then. The channels then keep
  their events in their own buffers, and the worst latency from the fast trigger
  to the end of the frame stays below 6 µs.
* `tb/ref8b10b_pkg.sv` is an independent, table-based 8b/10b reference written
  from the published (RD−, RD+) tables. `tb/analog_channel_model.sv`
  answers conversions with comparator pulses of lengths set by the testbench.
* Block tests cover the pieces in isolation: Wilkinson codes and timing, TMR
  upsets, Hamming single and double errors, the SPI protocol, arbiter fairness,
  FIFO order, framing at every link set-up, the 8b/10b code against the reference
  (DC balance, run length ≤ 5), serializer bit order, and test pulse width.

## 8. Changing it

`tiger_top` takes `N_CH` (64) and `FIFO_DEPTH` (16, a power of two). The
channel count is also bounded by the 6-bit channel field of the event word and
of the SPI address. `tiger_pkg` holds the widths: `COARSE_W`, `ADC_BITS` and the 25 ns step
`SH_STEP` (in clocks; change it if the clock changes). If an event field is
widened, the event word and `EV_W` must be widened with it, and so must the frame
length in `frame_tx` (`FRAME_LEN` = 1 + bytes).
