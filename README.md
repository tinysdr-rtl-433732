# A LoRa and BLE baseband for a low-power IoT software radio

An IoT endpoint that wants to be a software radio has a tight budget: a
few hundred milliwatts, a small FPGA, and a radio chip that delivers raw
I/Q samples instead of packets. This design is the FPGA side of such a
node, following the architecture of the TinySDR platform (NSDI 2020). An
AT86RF215-class transceiver samples the baseband at 4 MS/s with 13-bit I
and Q and exchanges the samples with the FPGA over a serial LVDS link; an
MCU configures everything over SPI. On the FPGA, in SystemVerilog:

* the serial I/Q link in both directions (32-bit words, 64 MHz double data
  rate, 128 Mb/s);
* a LoRa modulator: packet generator and chirp generator built on a
  squared phase accumulator;
* a LoRa demodulator: 14-tap low-pass filter, a 126 kB sample buffer with
  its memory controller, dechirping against generated reference chirps,
  an FFT (a vendor core, outside this RTL) and a symbol detector that also
  tells upchirps from downchirps;
* a BLE advertising-beacon transmitter: CRC-24, data whitening and a GFSK
  modulator;
* an SPI register interface for the MCU, an SPI-mode port to a microSD
  card, and a top level that ties the three signal paths to the one radio
  link.

Everything runs on one 64 MHz clock. The 4 MS/s sample instants are
one-clock strobes (`tick`) from a divide-by-16 counter, so there are 16
clocks of work per sample, which several blocks use to reuse one
arithmetic unit over many steps.

## Block diagram

```
                 +-------------- tinysdr_fpga_top -----------------------------+
 MCU SPI ------->| spi_slave -> registers (mode, SF, BW, payloads, results)     |
 microSD <------>|   registers 0x3A/0x3B -> spi_master                         |
                 |                                                             |
                 |  LoRa TX: lora_packet_generator -> chirp_generator --+       |
                 |  BLE TX : ble_packet_generator                       |       |
                 |           (ble_crc24, ble_whitening) -> gfsk_mod ----+-> iq_serializer -> txd, txclk
                 |                                                             |
 rxd ----------->|  iq_deserializer -> fir_lpf -> decimate 2^os -> memory_controller
                 |        + sample_sram -> lora_demodulator (chirp_generator,  |
                 |        complex_multiplier, symbol_detector) <-> FFT core ports
                 +-------------------------------------------------------------+
```

`mode` (register 0x00) selects one path at a time: idle, LoRa TX, LoRa RX
or BLE TX. The FFT core's ports are ports of the top, one set per
demodulator lane.

## The serial I/Q link

Each 4 MS/s sample travels as one 32-bit word, most significant bit first:

| bits  | 31:30        | 29:17 | 16   | 15:14        | 13:1  | 0    |
|-------|--------------|-------|------|--------------|-------|------|
| field | I_SYNC = 10b | I     | ctrl | Q_SYNC = 01b | Q     | ctrl |

The link moves one bit on each edge of the 64 MHz clock, so one word
takes 16 clocks.

**Transmit (`iq_serializer`).** Each word is shifted out two bits per
clock. A rising-edge register and a falling-edge register each hold one
bit of the pair; the pin is driven by a pseudo dual-edge flip-flop
(`dual_edge_ff`): both registers are written at the rising edge as
`q ^ d`, and the output is the XOR of the two, which changes at either
edge. The forwarded clock `txclk` comes from a second dual-edge flip-flop
with constant data (1 in the high half, 0 in the low half), so it lines up
with the data exactly. `load` tells the producer when the sample is taken.
The control bits are inputs, tied to 0 in the top.

**Receive (`iq_deserializer`).** `rxd` is sampled on both edges. On every
rising edge the two new bits enter a 33-bit history, and two 32-bit
windows of it are examined: the one that ends on the rising edge and the
one that ends on the falling edge, because a word may start on either.
A window with `10` in bits 31:30 and `01` in bits 15:14 is a candidate;
the block locks when the next word, 16 clocks later, shows the pattern at
the same place. Random data imitates the pattern now and then, so this
one-word confirmation is what keeps false locks rare, and a sync mismatch
on any later word drops the lock and restarts the search. While locked,
`valid` pulses once per word (every 16 clocks) with I, Q and the two
control bits.

The receive clock is taken to be the fabric clock. On the real board the
radio supplies the receive clock; a clock-domain crossing (or running the
fabric from that clock) would be needed there.

## LoRa transmit

A LoRa symbol is a chirp: its frequency rises linearly across the
bandwidth BW over 2^SF chips and wraps around. The symbol value s
(0 .. 2^SF - 1) is where in the sweep it starts, i.e. a cyclic shift. A
packet is 10 preamble upchirps of value 0, two sync upchirps, 2.25
downchirps and then the data symbols.

**`chirp_generator`** keeps two 32-bit accumulators in units of 2^32 per
cycle per sample (i.e. fractions of the 4 MS/s rate):

```
D       = 2^os_log2              samples per chip (BW = 4 MHz / D)
f_start = (s * 2^(32-SF) - 2^31) / D            (negated for a downchirp)
f      += 2^(32 - SF - 2*os_log2)   each sample, wrapping at +/- 2^31 / D
phase  += f                          each sample
I, Q    = 4095 * cos, sin (2 pi phase / 2^32)
```

The frequency grows linearly and the phase with the square of time, which
is the "squared phase accumulator". With power-of-two D every step is
exact, so a symbol ends exactly where the next would start. Sine and cosine
come from 1024-entry tables computed at elaboration with `$cos`/`$sin`
(I = 4095 cos(2 pi k / 1024), Q = 4095 sin(2 pi k / 1024)); the top 10
bits of the phase address them. A downchirp is the complex conjugate
of an upchirp. Sweep and bandwidth are set per symbol on `load`; in the
transmitter the phase runs on across symbol boundaries, in the
demodulator's reference copy it restarts at zero for each symbol.
BW = 500, 250, 125, 62.5, 31.25, 15.625 and 7.8125 kHz (os_log2 = 3 .. 9)
are reachable; LoRa's 10.4, 20.8 and 41.7 kHz bandwidths are not
(they need non-power-of-two ratios).

**`lora_packet_generator`** holds the payload (up to 255 bytes, written
over SPI) and drives the chirp generator on every `tick`. It first runs a
CRC over the payload (one byte per clock), then emits preamble, sync, two
downchirps, a quarter downchirp (2^(SF+os_log2)/4 samples) and the data
symbols. LoRa's header format, forward error correction, whitening,
interleaving and Gray mapping are proprietary and not used: the data are
the bytes {length, payload..., CRC[7:0], CRC[15:8]}, with CRC-16/XMODEM
(polynomial 0x1021, start value 0), cut into SF-bit symbol values least
significant bit first, the last one zero padded. A commercial LoRa chip
therefore cannot decode these packets; the chirps, the packet framing and
the timing are LoRa's.

## LoRa receive

```
rxd -> iq_deserializer -> fir_lpf -> keep 1 of 2^os_log2 -> sample buffer
    -> lora_demodulator: read symbol twice
         pass 0: x[n] * downchirp[n] -> FFT -+
         pass 1: x[n] * upchirp[n]   -> FFT -+-> symbol_detector -> (s, up/down)
```

**Filter (`fir_lpf`).** 14 taps, a Hamming-windowed sinc with cutoff
300 kHz at 4 MS/s (enough for a 500 kHz LoRa channel),
`{12, 158, 662, 1729, 3255, 4797, 5771, 5771, 4797, 3255, 1729, 662, 158, 12}`,
which sum to 2^15. With 16 clocks per sample one multiplier per rail does
all 14 products; the result is rounded, shifted by 15 and saturated to 13
bits, 16 clocks after the input.

**Decimation.** The demodulator works on one sample per chip, so the top
keeps every 2^os_log2-th filtered sample (counted from the start of a
capture) and writes only those to the buffer. This is where the buffer
size goes furthest: 2^SF words per symbol.

**Sample buffer (`sample_sram` + `memory_controller`).** 126 kB of 26-bit
words is 39699 words of simple dual-port RAM (one write port, one read
port with one clock of latency). The controller runs it as a FIFO: one
write per clock when asked, a read port that addresses samples by offset
from the oldest one (so the demodulator can read a symbol more than once),
and an "advance by n" that drops a finished symbol. The wrap is at 39699,
not a power of two. Writes into a full buffer are counted, not stored.

**Demodulator (`lora_demodulator`).** When 2^SF samples are buffered it
reads them twice, one per clock. Each sample is multiplied
(`complex_multiplier`: full product, rounded shift by 11, saturated to 16
bits) by a reference chirp from its own `chirp_generator` running at one
sample per chip: a downchirp in the first pass and an upchirp in the
second. Dechirping an upchirp of value s with the downchirp leaves a pure
tone at bin s; the same upchirp against an upchirp leaves a doubled-rate
chirp that spreads over all bins. A downchirp behaves the other way round.
Each product stream goes to the FFT core with `fft_in_last` on the last
sample and `fft_log2_size` = SF. The `symbol_detector` tracks the largest
re^2 + im^2 in each FFT output frame (2^SF bins in natural order); after
the second frame it reports the peak bin of the stronger frame as the
symbol value and flags a downchirp when the second frame's peak was the
larger. The symbol is then dropped from the buffer.

Timing: a symbol costs about 2 * 2^SF + 4 clocks of reading plus the FFT
latency. At SF 12 that is about 128 us against 8.2 ms of air time at
500 kHz, so the receiver keeps up in real time with a lot of margin.

**Symbol alignment.** No preamble detection or timing recovery is part of
this design: demodulation windows start at the first sample captured after
the start command, and each is exactly 2^SF chips long. A timing offset
of t chips therefore shows up as a constant shift of every symbol value by
t, which the MCU can estimate from the preamble (all values should be 0).
The quarter downchirp shifts the data by another 2^SF / 4 chips, so each
data window holds three quarters of one symbol and one quarter of the
previous one; the reported value is d - 2^SF/4 + t, and with a fractional
timing offset it can land one bin away. Proper synchronisation on the
preamble and the downchirps would remove both effects and is the main
piece a real receiver would add.

**Concurrent lanes.** `N_DEMOD` (default 1) builds several demodulator
lanes behind the one deserializer and filter, each with its own share of
the buffer (39699 / N_DEMOD words), its own decimation and spreading factor,
and its own FFT port set. Two lanes with different SF or bandwidth
demodulate two overlapping LoRa transmissions whose chirp slopes differ
(slope = BW^2 / 2^SF), which is the concurrent reception experiment of the
TinySDR paper.

## BLE advertising beacons

`ble_packet_generator` sends, one bit per request, least significant bit
first: the preamble 0xAA, the advertising access address 0x8E89BED6, the
PDU (2-byte header plus up to 37 bytes, written over SPI) and the 24-bit
CRC. `ble_crc24` is the Bluetooth LFSR (x^24 + x^10 + x^9 + x^6 + x^4 +
x^3 + x + 1, start 0x555555) fed with the PDU; its register is sent most
significant bit first. `ble_whitening` XORs PDU and CRC with the x^7 + x^4
+ 1 sequence. Its seed follows the Bluetooth specification: bit 0 set, bits
1..6 the channel index (37, 38 or 39 for advertising). The TinySDR paper
words this as "the lower 7 bits of the channel number"; that would not
produce the sequence receivers expect, so the specification is followed.

`gfsk_modulator` turns bits into I/Q at 4 samples per bit (1 Mb/s). The
upsampled +/-1 stream passes an 8-tap Gaussian filter
`{1, 6, 35, 86, 86, 35, 6, 1}` (BT = 0.5, taps sum to 256) whose output
is the instantaneous frequency; shifted left by 20 it is added to a 32-bit
phase, so a run of ones advances the phase by 2^28 per sample, +250 kHz,
modulation index 0.5. The phase drives the same sine/cosine tables as the
chirp generator. The Gaussian filter delays each bit by about one bit, so
the top keeps the modulator running for 8 samples after the last bit.

## MCU register interface

SPI mode 0 (sample on the rising edge of `sclk`), oversampled by the
64 MHz clock through two-stage synchronisers, so `sclk` must stay below about
8 MHz (clk / 8). A frame is a command byte `{write, addr[6:0]}` followed by data
bytes; further bytes in the same frame go to addr + 1, addr + 2, ... Read
data are shifted out on `miso` during the byte after the command.

| addr        | access | meaning |
|-------------|--------|---------|
| 0x00        | W      | bits 1:0 mode (0 idle, 1 LoRa TX, 2 LoRa RX, 3 BLE TX); bit 7 start |
| 0x00        | R      | {receiver locked, RX busy, BLE busy, LoRa TX busy, 0, 0, mode} |
| 0x01 / 0x02 | RW     | TX spreading factor (reset 8) / TX log2(4 MHz / BW) (reset 5 = 125 kHz) |
| 0x03        | RW     | preamble length (reset 10) |
| 0x04 / 0x05 | W      | sync symbol values |
| 0x06        | RW     | LoRa payload length |
| 0x07 / 0x08 | W      | payload write pointer / payload byte (pointer + 1 after each) |
| 0x09 / 0x0A | W      | BLE channel index (reset 37) / PDU length |
| 0x0B / 0x0C | W      | PDU write pointer / PDU byte (pointer + 1 after each) |
| 0x0D / 0x0E | W      | number of symbols to demodulate, low / high byte |
| 0x10 + 4l   | RW     | lane l spreading factor |
| 0x11 + 4l   | RW     | lane l log2(4 MHz / BW) |
| 0x12 + 4l   | R      | lane l last symbol [7:0] |
| 0x13 + 4l   | R      | lane l {downchirp, 0, 0, 0, last symbol [11:8]} |
| 0x30 + l    | R      | lane l symbols demodulated (mod 256) |
| 0x38        | R      | buffer overflow count (lane 0, low byte) |
| 0x3A        | RW     | microSD: W bit 0 selects the card (`sd_cs_n` low); R {SPI busy, 0..0, selected} |
| 0x3B        | RW     | microSD: W sends the byte to the card; R the byte the card returned |

A LoRa transmission: write the configuration and payload, write mode 1,
then mode 1 with bit 7 (0x81); poll bit 4 of the status. Reception: set
the lane registers and the symbol count, write mode 2 (the receiver locks
on the radio's words), then 0x82 to clear the buffer and start capturing
and demodulating. A beacon: load the PDU, write 0x03, then 0x83.

## microSD card port

`spi_master` drives the card in its 1-bit SPI mode (mode 0, MSB first).
One write to register 0x3B sends a byte and collects the card's answer
byte in 16 clocks (`sclk` = 32 MHz). The MCU owns chip select (0x3A) and
runs the SD command protocol (reset, block-write commands, data tokens,
CRC) one byte at a time. TinySDR streams the captured samples straight
from the buffer to the card at 104 Mb/s (4 MS/s of 26-bit samples); that
path is not built here: it needs a serial clock above what one 64 MHz
domain gives, plus a block-write sequencer in the FPGA.

## What differs from the TinySDR design

* The FFT is a vendor core in the original and is not part of this RTL;
  its streaming ports are brought out (one sample per clock in, `last` on
  the final sample, 2^SF bins out in natural order).
* LoRa coding (header format, FEC, interleaving, whitening, Gray mapping)
  is replaced by the simple byte framing and CRC-16 above, and no
  preamble synchronisation is done in the receiver (see "Symbol alignment").
* Only power-of-two bandwidth ratios of 4 MHz are supported.
* The BLE whitening seed follows the Bluetooth specification rather than
  the original text's description.
* The microSD port moves bytes under MCU control at 32 Mb/s; the
  real-time 104 Mb/s sample path to the card is missing (see above).
* The PLL, the LVDS pads, and everything on the MCU side (MAC, over-the-air programming,
  power management) are not part of this RTL.
* Filter coefficients, the Gaussian taps, all word widths, the register
  map and the single clock domain are this design's own choices.

## Files

| file | contents |
|------|----------|
| `rtl/tinysdr_pkg.sv` | shared types: 13-bit `iq_t`, `iq_sample_t`, `sf_t`, `mode_t`, sync patterns, word packing |
| `rtl/tinysdr_fpga_top.sv` | top level, registers, TX mux, RX lanes |
| `rtl/iq_serializer.sv`, `rtl/dual_edge_ff.sv`, `rtl/iq_deserializer.sv` | serial I/Q link |
| `rtl/clock_divider.sv` | 4 MS/s strobe |
| `rtl/chirp_generator.sv`, `rtl/sincos_lut.sv`, `rtl/lora_packet_generator.sv` | LoRa transmit |
| `rtl/fir_lpf.sv`, `rtl/sample_sram.sv`, `rtl/memory_controller.sv`, `rtl/complex_multiplier.sv`, `rtl/symbol_detector.sv`, `rtl/lora_demodulator.sv` | LoRa receive |
| `rtl/ble_crc24.sv`, `rtl/ble_whitening.sv`, `rtl/ble_packet_generator.sv`, `rtl/gfsk_modulator.sv` | BLE transmit |
| `rtl/spi_slave.sv` | MCU interface |
| `rtl/spi_master.sv` | microSD card port |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/fft_model.sv` | behavioural DFT standing in for the FFT core (testbenches only) |

Every file starts with a comment describing what the block does, its
interface and timing.

## Simulation

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops; a
watchdog ends a hung run with a failure. They need only Verilator 5 (with
`--timing`):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/tinysdr_pkg.sv tb/tb_tinysdr_fpga_top.sv --top-module tb_tinysdr_fpga_top
./obj_dir/Vtb_tinysdr_fpga_top
```

Substitute any `tb_<block>` for a single block. The testbenches compare
against reference values computed independently in the testbench
(real-arithmetic chirps and DFTs, bit-serial CRC and whitening models, a
filter model, and so on) and check rates and latencies where they matter
(one word per 16 clocks on the link, 16-clock filter latency, 2 * 2^SF
reads per symbol).

`tb_tinysdr_fpga_top` runs the complete design at its default sizes
(126 kB buffer, one lane) in about 15 s of wall-clock time on a PC. It
acts as the MCU over SPI, as the radio (it records the LVDS words the
design transmits and plays them back into the receiver) and as the FFT
core. It sends a LoRa packet (SF 7, 125 kHz, random 4-byte payload),
receives that recording and checks every demodulated window: preamble
values equal to the measured offset t, sync values + t, two downchirps,
and data values d - 2^SF/4 + t within one bin. It then sends a BLE beacon
on channel 37 and recovers its bits from the recorded I/Q by the sign of
the phase step in the middle of each bit, comparing with preamble, access
address, whitened PDU and CRC worked out in the testbench. Last, it
exchanges three bytes with a microSD card model. It counts packets sent,
locks, symbols, downchirps, mode changes, register reads and card bytes,
and fails if any of them never happened.

`tb_concurrent_lora` builds the top with two lanes and feeds it the sum
of two chirp streams computed in the testbench, SF 7 at 125 kHz and SF 8
at 250 kHz, both starting together; each lane must return its own
stream's symbols (to within one bin), with the other stream spread out as
noise. It runs in a few seconds.

Simulation is two-state; every register that is read is reset.
