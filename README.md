# FPS backscatter tag for Zigbee: RTL

A backscatter tag sends no radio signal of its own. It reflects a carrier
sent by another device, and it writes data onto that carrier by toggling an RF
switch that changes its antenna's load. If the switch toggles as a square wave
of frequency *f* and phase φ, the reflection appears *f* away from the
carrier and carries the phase φ. Filters in the receiver remove everything but
that first harmonic. So the tag controls a radio signal's frequency and phase
with one digital output line.

Zigbee (IEEE 802.15.4 at 2.4 GHz) sends 2 million chips per second. Each
0.5 µs chip turns the carrier phase by +π/2 (read as 1) or −π/2 (read as 0).
The usual tag method (*instantaneous phase shift*, IPS) jumps between square
waves of four fixed phases. Each jump is a phase step, and the steps spread
energy far outside the channel. *Frequency-phase shift* (FPS) turns the
phase gradually instead. To add Δφ over a time ΔT, it moves the square wave's
frequency by

    f_FP = Δφ / (2π ΔT)

for exactly that time. For Zigbee, Δφ = π/2 and ΔT = 0.5 µs, so f_FP = 500 kHz.
The tag therefore reflects at f_shift + 500 kHz for a "1" chip and at
f_shift − 500 kHz for a "0" chip. Here f_shift = 10 MHz, which moves the
reflection from Zigbee channel 12 to channel 14. The phase changes smoothly and
the spectrum stays narrow. The measured occupied bandwidth (90 % of the energy)
is 1.8 MHz with FPS against 3.2 MHz with IPS.

This RTL is the tag's digital part, the logic that drives the RF switch.
It has two modes:

* **FPS packet mode.** The carrier is a single tone. The tag builds a complete
  802.15.4 packet from its data and writes it onto the tone chip by chip, so a
  standard Zigbee receiver on channel 14 decodes it.
* **Codeword-translation mode.** The carrier is an ordinary Zigbee packet.
  A tag bit 1 inverts the chips it covers, which turns each codeword into
  another valid one. A tag bit 0 leaves them unchanged. A receiver listening to
  the original packet and one listening to the reflection compare their results
  (XOR) to get the tag bits. FPS does the inversion smoothly: inverting a chip
  adds +π over 0.5 µs, so f_FP = 1 MHz.

## The eight square waves and phase continuity

The hardest part to see is how the tag keeps the phase continuous while it
changes frequency every chip. The tag has eight square waves available:

| wave | frequency            | initial phase |
|------|----------------------|---------------|
| #0   | f_shift + f_FP       | 0             |
| #1   | f_shift + f_FP       | π/2           |
| #2   | f_shift + f_FP       | π             |
| #3   | f_shift + f_FP       | 3π/2          |
| #4   | f_shift − f_FP       | 0             |
| #5   | f_shift − f_FP       | 3π/2          |
| #6   | f_shift − f_FP       | π             |
| #7   | f_shift − f_FP       | π/2           |

"Initial phase" is the wave's phase at the start of a chip. Each wave restarts
at every chip boundary (`square_wave_bank`). A chip lasts 0.5 µs, which is
exactly 5 periods of f_shift, so in the f_shift frame the reflection's phase
is the sum of the quarter turns added so far. If the last chip ended at phase
θ, the next chip must use the wave whose initial phase is θ:

* for a "1" chip: wave #θ (counted in quarter turns), then θ ← θ + π/2;
* for a "0" chip: the f_shift − f_FP wave with phase θ, which is wave
  #(4 + (−θ mod 4)), then θ ← θ − π/2.

Example: the phase stands at π/2 and the next chip is a "1". The tag picks
wave #1, and the phase ramps from π/2 to π. `fps_controller` holds θ
(`phase_q`) and makes this choice at every chip boundary.

Codeword translation uses the same bank with 11 MHz and 10 MHz. It uses only
the phase-0 and phase-π waves (#0, #2, #4, #6). `ct_controller` tracks a
half-turn offset that flips after every chip of a tag bit 1.

### Exact phase arithmetic

The clock is 100 MHz. Phase is counted in units of 1/200 of a turn, so one
unit per clock equals 500 kHz. Every frequency in the design is then a whole
number of units per clock:

| frequency | units per clock |
|-----------|-----------------|
| 9.5 MHz   | 19              |
| 10 MHz    | 20              |
| 10.5 MHz  | 21              |
| 11 MHz    | 22              |

A quarter turn is 50 units. The accumulators work modulo 200 and never drift.
A 50-clock chip at 21 units per clock adds 1050 units, which is 5¼ turns.
Restarting at 50 units (π/2) therefore continues the wave without a break.
A wave is high while its phase is in [0, π).

## From tag data to chips (FPS packet mode)

1. **`tag_data_buffer`** is a 128 × 8 memory. A host writes it through
   `buf_we/buf_addr/buf_wdata`, and the modulators read it combinationally.
2. **`packet_framer`** sends an 802.15.4 PHY packet. The packet is four 0x00
   preamble bytes, the start-of-frame byte 0xA7, a length byte (payload + 2),
   up to 125 payload bytes, and a 16-bit FCS. The FCS is a CRC-16 with
   polynomial x¹⁶+x¹²+x⁵+1, initial value 0 and data LSB first. Bytes leave as
   4-bit symbols, low nibble first.
3. **`dsss_spreader`** looks up each symbol's 32 chips c₀…c₃₁ in the
   802.15.4 table. It outputs what the receiver will actually see, which is the
   direction of each phase step rather than the chip itself:
   `d_n = c_n ⊕ c_(n−1) ⊕ (n odd)`.
   For symbols 0000, 0001, 1110 and 1111, d₁…d₁₀ are 1100000011, 1001110000,
   0001000010 and 1111000100. These are the chip prefixes drawn in the
   transmitter diagram this design follows. The table itself is generated in
   `fps_pkg::chip_seq` from its first row: rows 1–7 are 4-chip cyclic shifts,
   and rows 8–15 are rows 0–7 with the odd chips inverted.
4. **`fps_controller`** → **`square_wave_bank`** → `rf_sw`, as described
   above.

One symbol takes 32 chips (16 µs) and one byte takes 32 µs, which is 250 kb/s.
A packet with an L-byte payload lasts (L + 8) × 64 chips.

## Codeword-translation mode

**`tag_bit_source`** reads L buffered bytes and sends their bits LSB first.
**`ct_controller`** spends 32 chips (one Zigbee symbol) on each tag bit:

* for a 1, it uses the f_shift + 1 MHz wave, which adds +π per chip;
* for a 0, it uses the f_shift wave, which adds nothing.

Inverting all 32 phase steps of symbol k gives symbol k ⊕ 8, which is in the
same codebook, so the reflected packet stays decodable. The tag must know where
the carrier's chips start. A one-clock `chip_sync` pulse restarts the chip grid:
the cycle after the pulse is the first clock of a chip.

## Module map and interfaces

```
fps_tag_top
├── chip_timer          50-clock chip grid, chip_last strobe, chip_sync restart
├── tag_data_buffer     128 x 8, 1 write / 1 combinational read port
├── packet_framer ──sym(4b) valid/ready──> dsss_spreader ──chip dir valid/ready──> fps_controller
├── square_wave_bank    10.5 / 9.5 MHz, waves #0..#7          (FPS)
├── tag_bit_source ──bit valid/ready──> ct_controller
└── square_wave_bank    11 / 10 MHz, waves #0, #2, #4, #6 used (codeword translation)
fps_pkg                 constants, chip table, CRC, mode enum
```

The streams between blocks use valid/ready handshakes. The controllers take a
chip or bit only in a `chip_last` cycle. Their selection, and the restart of
the wave accumulators, take effect on the clock edge that ends that cycle,
which is the chip boundary. `rf_sw` is registered, so it lags the boundary by
one clock.

Top-level ports of `fps_tag_top`:

| port | meaning |
|------|---------|
| `mode` | 0 = FPS packet, 1 = codeword translation; sampled with `start` |
| `start` | begins a transfer; ignored while `busy` |
| `len` | payload bytes (FPS mode, at most 125) or tag bytes (codeword translation) |
| `chip_sync` | restarts the chip grid |
| `buf_*` | buffer write port; do not write while `busy` |
| `rf_sw` | RF switch control, driven to 0 when idle |
| `busy` | a transfer is in progress |

A transfer starts at the first chip boundary after `start`. The tag is idle
with the switch off between transfers.

After generic synthesis, the whole top is about 580 word-level cells and 1,176
flip-flops. Of those flip-flops, 1,024 are the data buffer, which is cleared on
reset; on an FPGA it could become distributed RAM if the reset clear were
dropped.

## What follows the source and what does not

These values come from the FPS description:

* f_shift = 10 MHz, f_FP = 500 kHz (FPS) and 1 MHz (codeword translation);
* the 0.5 µs chip;
* the eight-wave and four-wave sets with their numbering and phases;
* the rule that a wave's initial phase carries the accumulated phase;
* the 250 kb/s, 4-bit-symbol, 32-chip structure of 802.15.4.

The design chose these itself:

* the 100 MHz clock and the 500 kHz phase resolution;
* the restart of every wave at the chip boundary;
* the switch polarity (high for phase in [0, π));
* the packet framing and FCS, taken from the 802.15.4 standard;
* the full chip table, also from the standard (only four prefixes are printed
  in the source);
* taking the chip before a packet as 0;
* the buffer and its size;
* one tag bit per 32-chip symbol, LSB first, in codeword translation;
* the `chip_sync` input;
* the valid/ready handshakes;
* resetting the phase to 0 when idle.

Not included:

* **IPS modulation.** It is the baseline FPS is compared against.
* **The RF front end.** This is the envelope detector (AD8313), the comparator
  and the RF switch (ADG902). The switch is driven by `rf_sw`.
* **Downlink instruction decoding.** The source mentions it but does not
  define it.
* **The commodity Zigbee transmitter and receivers**, including the XOR that
  recovers codeword-translation bits.

One inconsistency in the source: the single-tone carrier sits 500 kHz below
channel 12's 2410 MHz centre. A 10 MHz shift therefore lands it at
2419.5 MHz, not at channel 14's 2420 MHz centre. This RTL uses the stated
10 MHz. Changing `F_SHIFT_HZ` to 10.5 MHz would centre the reflection, and
it stays exact because 10.5 MHz is a multiple of 500 kHz.

## Simulation

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops on a watchdog. To run one with
Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/fps_pkg.sv \
          tb/tb_fps_tag_top.sv --top-module tb_fps_tag_top -Mdir obj
./obj/Vtb_fps_tag_top
```

`tb_fps_tag_top` runs the design at its default parameters. It acts as an
independent receiver. It correlates the switch signal with a 10 MHz reference
over every chip, reads each chip's phase step, and then:

* in FPS mode, matches the chips against the 802.15.4 table (phase-direction
  form, Hamming distance) and checks every byte and the FCS of the recovered
  packet;
* in codeword-translation mode, checks that each 32-chip group carries one tag
  bit.

It also checks:

* the packet length in chips, which is the 250 kb/s rate;
* that the switch stays idle outside packets;
* that every half period of the switch signal lasts 4–6 clocks, which rules
  out phase jumps;
* that `chip_sync` moves the chip grid.

It sends 10-, 20- and 125-byte FPS packets and a 3-byte codeword-translation
transfer, switching mode in both directions. It counts each mechanism and
fails if one never happened. The whole run takes about 15 s.

`tb_fps_bandwidth` repeats the spectrum comparison. It records a 20-byte FPS
packet from the top and also renders the same chips as IPS inside the
testbench: a 10 MHz square wave whose phase jumps ±π/2 at each chip
boundary. It then measures the 90 % occupied bandwidth over 5–15 MHz:

| modulation | this RTL | reported |
|------------|----------|----------|
| FPS        | 1.65 MHz | 1.8 MHz  |
| IPS        | 2.73 MHz | 3.2 MHz  |

The DFT window stops 5 MHz from f_shift, so it leaves out part of IPS's slowly
falling sidelobes.

`tb_codeword_translation` runs the two-receiver arrangement. It models a
random 32-symbol Zigbee carrier, and the tag translates it with 4 bytes (32
tag bits). The tag's phase per chip is measured from `rf_sw`.

* Receiver 1 decodes the carrier.
* Receiver 2 decodes the carrier plus the tag's phase.

Where the two symbols differ, the tag bit is 1, and the translated symbol must
be the original ⊕ 8. All 32 bits are recovered.

The block testbenches check:

* `square_wave_bank` against the formula (f·t + φ/2π) mod 1 < ½;
* `dsss_spreader` against the 802.15.4 table written out in full, and
  against the four printed prefixes;
* `packet_framer` against a bit-serial CRC whose check value on "123456789" is
  0x2189;
* the two controllers against the wave-choice rule, including the π/2 → π ⇒
  #1 example.
