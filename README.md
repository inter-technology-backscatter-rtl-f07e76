# Bluetooth-to-Wi-Fi backscatter: digital core

A Bluetooth radio can be made to transmit a plain carrier: choose the
advertising payload so that, after Bluetooth's data whitening, every bit is
the same. GFSK then sends one frequency for the whole payload. A tiny
device near that radio can reflect the carrier with a switched antenna
load. If it switches between four complex impedances so that the reflection
turns through 1+j, −1+j, −1−j, 1−j at 35.75 MHz, only one sideband is
produced, and the carrier moves onto a Wi-Fi channel. If it also multiplies
that rotation by 802.11b chips, the reflection is a valid 802.11b packet
that any Wi-Fi receiver decodes. The device needs no oscillator at 2.4 GHz
and no mixer: only a few digital gates running at 143 MHz and four RF
switches.

This RTL is the digital part of such a device:

* carrier-phase and chip-clock generation from one 143 MHz clock;
* a complete 802.11b transmit baseband: PLCP framing, CRCs, scrambling,
  DBPSK/DQPSK with Barker spreading, and CCK, at 1, 2, 5.5 and 11 Mbit/s;
* the single-sideband modulator, which turns chips into impedance selects;
* a 125 kbit/s downlink decoder that reads queries from an ordinary
  OFDM Wi-Fi transmitter through an envelope detector;
* the controller that waits for a query, finds the Bluetooth
  advertisement, and fits the Wi-Fi packet inside the advertisement's
  single-tone part.

The PLL, the RF switch network with its four loads and the envelope
detector are analog. They are outside the RTL and meet it at the ports of
`interscatter_top`.

## Clocking: one 143 MHz source

Everything runs on `clk`, which is 143 MHz. Two derived timings matter:

* **Carrier, 35.75 MHz = 143/4.** `phase_gen` is a two-bit Johnson counter
  (00→01→11→10). Its four decoded outputs are four square waves a quarter
  period apart. Taking them as samples of cos/sin, the carrier is
  exp(jθ), and θ advances by +90° each clock.
* **Chips, 11 MHz = 143/13.** `clk_div13` counts to 13. It gives a
  one-cycle `chip_en` strobe, which moves the baseband, and an `clk_11m`
  square wave (high for 7 of 13 cycles) for outside use.

Both timings come from the same edges, so a chip always lasts exactly 13
carrier quarter-periods and the two never slip. The design uses one clock
domain with enables rather than a separate 11 MHz domain.

## Phase arithmetic

All phases are two-bit numbers `p` in units of 90°. The value p stands
for exp(j(π/4 + p·π/2)):

| p | value  | impedance state (`zstate_e`) |
|---|--------|------------------------------|
| 0 | 1+j    | `Z_3PF` (3 pF)               |
| 1 | −1+j   | `Z_1PF` (1 pF)               |
| 2 | −1−j   | `Z_2NH` (2 nH)               |
| 3 | 1−j    | `Z_OPEN` (open)              |

802.11b uses {1, j, −1, −j}. The π/4 offset is a constant rotation, and
every 802.11b modulation is differential, so a receiver does not notice
it. In this arithmetic, multiplying complex values means adding phases
modulo 4. DBPSK, DQPSK, the Barker code and CCK then become 2-bit adders.

The assignment of the four loads to the four values follows the order in
which the loads and values are listed in the description of the hardware.
If a real switch network is wired differently, only `isc_pkg::iq_to_z`
changes.

## 802.11b baseband (`baseband_processor`)

The host writes the MAC frame, without its FCS, into `payload_buffer`
(209 bytes, one write port and a registered read port). It then sets
`cfg_rate` and `cfg_len`. On `start`, a chain of valid/ready bit streams
runs:

1. **`plcp_framer`** sends the short PLCP preamble: 56 zero SYNC bits, the
   SFD 0x05CF, and the 48-bit header (SIGNAL, SERVICE, LENGTH, CRC-16). It
   then sends the PSDU bytes and the CRC-32 FCS. It tags every bit with the
   rate at which it is to be sent: 1 Mbit/s for the preamble, 2 Mbit/s for
   the header, `cfg_rate` for the PSDU. Both CRCs are `crc_serial`
   instances: CRC-16 CCITT for the header, CRC-32 for the FCS.
2. **`scrambler`** is the 802.11b self-synchronising scrambler
   (x⁷+x⁴+1), seeded with the short-preamble seed at each packet.
3. **`chip_modulator`** collects the bits of one symbol ahead of need:
   1, 2, 4 or 8 bits. On each `chip_en` it outputs one chip phase:
   * at 1 and 2 Mbit/s, `dpsk_encoder` gives the symbol phase (DBPSK, or
     Gray-coded DQPSK) and `barker_spreader` adds 180° on the chips where
     the 11-chip Barker code is −1;
   * at 5.5 and 11 Mbit/s, `cck_encoder` forms the eight CCK chips from
     φ1…φ4. φ1 is differential to the previous symbol, with the extra 180°
     on odd symbols.

   The reference phase carries across the header/PSDU rate change.

The short preamble is not stated in the source description. It is chosen
because it reproduces the published packet sizes exactly: 96 µs of
preamble and header leave 152 µs of a 248 µs window, which is 38, 104 and
209 bytes at 2, 5.5 and 11 Mbit/s. A packet lasts 96 µs + 8·(len+4)/rate.
The testbenches check this to the chip.

## Single-sideband modulator (`ssb_modulator`)

The reflection must be chip × exp(j·2π·35.75 MHz·t). With the phase
arithmetic above, that is the carrier phase plus the chip phase. The
design does it the way the hardware description suggests. Two
multiplexers pick, out of the four carrier square waves, the ones shifted
by the chip phase, one for I and one for Q. The (I, Q) sign pair then maps
to the impedance state. The output is registered, so the switches change
only on clock edges. When no packet is being sent, the state rests at
3 pF.

Only the upper sideband is produced. The top testbench checks this:
taking the carrier back out of `zsel` leaves a phase that is constant over
each 13-cycle chip.

## Downlink: queries carried as OFDM amplitude (`ofdm_am_decoder`)

The device has no Wi-Fi receiver, only an envelope detector with a
comparator. The Wi-Fi access point writes bits into the amplitude of its
OFDM symbols:

* a **1** is a random OFDM symbol followed by a *constant* one (all
  subcarriers the same value). The constant symbol's energy sits in its
  first sample, so the detector output drops for most of the symbol;
* a **0** is two random symbols, and the detector stays mostly high.

Each bit is two 4 µs symbols: 8 µs per bit, 125 kbit/s.

The decoder framing is this design's own. After energy appears, it looks
for a start bit: a low stretch of 2 to 5 µs. The rising edge that ends the
stretch fixes the bit grid. Each of the 8 bits is decided by a majority of
low samples over its second symbol, skipping 1 µs at each end. The word is
8 bits, first bit in the LSB. The decoder then waits for 12 µs of silence
(the end of the Wi-Fi packet) before it looks for another start bit. A
frame that shows no start bit within 400 µs is dropped.

## Link control: fitting Wi-Fi inside a Bluetooth advertisement (`link_ctrl`)

The same detector output serves the uplink. The controller moves through
these steps:

1. **LISTEN.** The decoder is enabled. A decoded word equal to
   `cfg_dev_id` is a query for this device (`query_hit`). Any other word is
   ignored. In beacon mode (`cfg_beacon_mode`), no query is needed.
2. **ARMED.** The controller waits until the detector has been low for
   12 µs. Without this wait, the dips inside the query packet itself would
   look like the start of a Bluetooth packet.
3. **WAIT / DELAY.** A rising edge of the detector is taken as the start
   of a Bluetooth advertisement. The advertisement has a preamble, an
   access address and a header (56 µs), then the advertiser address
   (6 bytes, 48 µs), then the payload, which is set to whiten to a single
   tone. Transmission starts 56 + 48 + 4 = 108 µs after the edge. The
   4 µs is a guard for the uncertain moment at which energy detection
   fires. If the energy vanishes before 108 µs, the trigger is counted as
   false (`false_trig`) and the controller re-arms.
4. **TX.** `tx_sel` switches the antenna to the modulator and the baseband
   starts. The Wi-Fi packet must end before the Bluetooth CRC, which
   begins 56 + 48 + 248 = 352 µs after the edge. If the baseband has not
   finished by then, the packet is aborted (`pkt_aborted`). Otherwise
   `pkt_sent` pulses.

**Departure from the published sizes.** With the guard, the window is
244 µs, not 248 µs. The published maximum sizes (38, 104 and 209 bytes)
need the full 248 µs, so this design aborts them. The largest frames that
fit are 36, 101 and 203 bytes (PSDU, with FCS) at 2, 5.5 and 11 Mbit/s.
The sizes used in the published packet-error-rate measurements (31 bytes
at 2 Mbit/s, 77 bytes at 11 Mbit/s) fit easily. A 1 Mbit/s packet fits
only if it is tiny (14 bytes with the short preamble). `GUARD_US` and
`ADV_US` are parameters if a different reading of the timing is wanted.

## Top level (`interscatter_top`)

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | 143 MHz from the PLL; asynchronous active-low reset |
| `env` | in | envelope-detector comparator output (asynchronous; a 2-flop synchroniser is inside) |
| `wr_en`, `wr_addr`, `wr_data` | in | host write port of the 209-byte frame buffer |
| `cfg_rate`, `cfg_len`, `cfg_beacon_mode`, `cfg_dev_id` | in | rate, frame length without FCS, beacon mode, query id |
| `zsel` | out | 2-bit impedance state for the RF switch network |
| `i_out`, `q_out` | out | the I and Q signs behind `zsel` |
| `tx_sel` | out | TX/RX switch: 1 = antenna on the backscatter modulator |
| `clk_11m` | out | 11 MHz chip clock |
| `query_word`, `query_valid`, `query_hit` | out | downlink results |
| `pkt_sent`, `pkt_aborted`, `false_trig`, `underrun` | out | one-cycle event pulses |

Coarse synthesis of the top gives about 530 cells and 252 flip-flop bits.
The 209-byte buffer (1672 bits) and one 16-bit constant table are kept
as memories.

## What is not in the RTL

* The **PLL**, the **RF switch network** (two stages of SPDT switches to
  3 pF, open, 1 pF and 2 nH, plus the TX/RX switch) and the **envelope
  detector** are analog. Their digital signals are top-level ports.
* **Bluetooth whitening** belongs to the Bluetooth transmitter, not to
  this device. `tb/ble_whitener.sv` models it (x⁷+x⁴+1, register 0 set to
  1, the others to the channel number). The top testbench uses it to show
  that a payload equal to the whitening sequence goes out as a constant.
* **ZigBee generation** and the **RTS/CTS channel reservation** are
  mentioned only as extensions, with no detail to build from.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. The 802.11b checks use
an independent reference in `tb/dot11b_ref_pkg.sv`: a bit-level CRC-32
and CRC-16, the CCK phase equations, and a complete 802.11b chip-level
receiver (Barker/CCK despreading, differential demodulation,
descrambling, header CRC check, PSDU and FCS recovery). Notable checks:

* `tb_baseband_processor` sends random frames at all four rates. It
  decodes them with the reference receiver and checks that a packet lasts
  exactly 96 µs + 8·(len+4)/rate.
* `tb_ssb_modulator` checks that the reflection equals carrier × chip, and
  that it advances 90° per clock inside a chip.
* `tb_link_ctrl` checks the start at 108 µs and the abort at 352 µs, both
  to the clock cycle (plus two register stages).
* `tb_interscatter_top` runs at default parameters. It drives `env` with
  synthetic detector waveforms: queries with random dips inside random
  symbols, a stray burst, and advertisements. From `zsel` alone it removes
  the carrier, slices chips and decodes the Wi-Fi packet. It checks the
  air time (length of `tx_sel`) against 96 µs + 8·bytes/rate. It checks and
  counts each mechanism: query for another device, query hit, false
  trigger, a packet at each rate, deadline abort (too long at 1 Mbit/s;
  37 bytes at 2 Mbit/s; 209 bytes at 11 Mbit/s) and beacon mode.

Simulating with plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  -Irtl -Itb rtl/isc_pkg.sv tb/dot11b_ref_pkg.sv tb/tb_interscatter_top.sv \
  --top-module tb_interscatter_top -o sim && ./obj_dir/sim
```

The top testbench takes about 10 s of wall time.
