# PassiveBLE tag baseband in SystemVerilog

A PassiveBLE tag is a battery-free backscatter device that takes part in a real
Bluetooth Low Energy *connection* with an unmodified phone. It does not just
send one-shot advertising packets. Such a tag cannot afford a local oscillator
or a BLE decoder. It never learns the connection's dynamic parameters: the
CRC initial value (`CRC_Init`) and the channel index that seeds data whitening.
The trick is that BLE channel coding is built out of XORs:

```
sent bits = whiten( PDU || CRC(CRC_Init, PDU) )
          = [ tag part: PDU_tag || CRC(0, PDU_tag) ]  XOR  [ source part: whitening XOR CRC(CRC_Init, header||0) ]
```

A helper transmitter, the *excitation source*, is a commodity BLE chip with
modified firmware. It knows the dynamic parameters and sends the right-hand
part as a pre-modulated BLE packet. The tag reflects that packet with the RF
switch toggled at a fixed offset `f_s`, which moves it onto the channel the
phone listens to. While reflecting, it adds the left-hand part by rotating the
phase of its square wave. A BLE receiver decides each bit from the phase one
symbol accumulates: +π/2 means 1 and −π/2 means 0. If the tag adds π for a 1
and nothing for a 0, the receiver decodes *excitation bit XOR tag bit*. So the
XOR happens in the air, and the phone receives an ordinary BLE data packet with
correct whitening and a correct CRC.

The RTL here is the tag's digital part. It wakes up on the excitation packet's
preamble, recognises its own address, counts symbols to the point where its
packet starts, computes the zero-initialised CRC and drives the RF switch. The
analog front end, the RF switch and the excitation source are not digital logic
of the tag. They appear only as port signals and as models in the testbenches.

## How the tag sees the air: symbol changes

The tag has no mixer with a local oscillator. Its front end splits the
received signal, delays one path by about 46 ns in a chain of SAW filters, and
mixes the two paths in a diode. It then filters, amplifies and slices the
result with a comparator. A GFSK symbol differs from its neighbour only in
frequency, so the mixer output changes only where two neighbouring symbols
differ. The RTL assumes the comparator then gives **a short pulse at every
symbol change**, arriving `FE_DELAY` clock cycles after the change. Every
timing decision in the tag is made from these pulses:

* The BLE preamble alternates 0101…, so it appears as a run of pulses spaced
  exactly one symbol apart. That is 7 internal boundaries in LE 1M (1-byte
  preamble) and 15 in LE 2M (2-byte preamble).
* After that, the tag can only tell whether a symbol differs from the one
  before it. It cannot read a symbol's value.

## Packet timeline

The excitation source sends one BLE data packet per connection event. Counting
symbols `s` from the first Access Address symbol:

| symbols `s`           | excitation packet field             | what the tag does                                           |
|-----------------------|-------------------------------------|-------------------------------------------------------------|
| before 0              | preamble (8 or 16 symbols)          | `preamble_detector` finds the run and fixes the symbol grid |
| 0 … 31                | Access Address                      | `address_decoder` reads the tag address                     |
| 32 … 47               | header                              | waits; the end of the header triggers the transmission      |
| 48 … 48+R−1           | first 7 (LE 1M) / 8 (LE 2M) payload bytes, R = 56/64 | switch on, tag bit 0. These bytes already *are* the tag packet's preamble, Access Address and whitened header |
| next 8·L              | whitening sequence                  | tag payload bits, LSB of each byte first                    |
| next 24               | `CRC(CRC_Init, header‖0) ⊕ whitening` | zero-init CRC of the tag payload, bit 23 first            |
| next 24               | excitation CRC (the phone drops it) | switch off; hunting held off for these 24 symbols           |

The tag packet therefore carries at most 251 − 7 − 3 = 241 payload bytes in
LE 1M and 251 − 8 − 3 = 240 in LE 2M. The buffer holds `DEPTH = 241` bytes,
and longer `payload_len` values are clamped to the PHY's limit. The phone's receiver only locks onto the tag's packet on the
shifted channel. The excitation packet's own preamble, address and header sit
on the original channel and are never seen there.

## Tag addressing by symbol changes

Each tag is addressed through the excitation packet's Access Address. The
Access Address is free for the source to choose, and the receiver never sees
it. To make address detection robust at low signal levels, each of the
32/n address bits is spread over `SYMS_PER_BIT` = n = 8 symbols. With 32
Access Address symbols this gives 4 address bits, so 16 tags. The code used
here fits a receiver that only sees changes:

* address bit 1: each of its n symbols differs from the previous one, which
  gives n pulses;
* address bit 0: its n symbols repeat the previous one, which gives no pulses.

This is the "runs of 0 for a 0, alternating 01 for a 1" idea, stated in terms
of changes. A 0 group repeats whatever symbol came before it, which may be 0 or
1. So the tag never has to know a symbol's value.

The sequencer opens one slot per expected symbol edge. Each slot is a symbol
wide and centred on the edge grid fixed by the preamble. The decoder takes a
bit as 1 when at least ⌈n/2⌉ of its n slots held a pulse. It accepts a group
only when at most `ERR_TOL` = 2 slots disagree with that decision. The limit
is there because payload data of packets meant for other tags is random. Now
and then such data looks like a preamble. Without the limit, the 32 random
symbols after it would match a given 4-bit address one time in 16. With it,
that happens about one time in 2000.

## The distributed CRC

The BLE CRC is a 24-bit LFSR with generator
g(x) = x²⁴ + x¹⁰ + x⁹ + x⁶ + x⁴ + x³ + x + 1. It is linear over GF(2), so
`CRC(init, m) = CRC(0, m) ⊕ CRC(init, 0…0)`. The excitation source owns the
header and `CRC_Init`. It sends `CRC(CRC_Init, header ‖ 0^(8L))`, whitened, in
the tag's CRC field. The tag runs `pre_crc`, the same LFSR started from zero,
over its payload bits only. An LFSR started from zero stays zero while zero
bits go in, so the header bits need not enter the tag's LFSR. The whitening
sequence (LFSR x⁷+x⁴+1 seeded with the channel index) is handled entirely by
the source. The tag payload field of the excitation packet is just the
whitening sequence, and XOR is associative.

## Phase XOR and the frequency shift

`backscatter_modulator` drives the RF switch with the MSB of a 16-bit phase
accumulator that advances by `FS_INC` each clock. The defaults give
f_s = 6144/65536 · 64 MHz = 6 MHz, which is three BLE channels. During a
symbol whose tag bit is 1, it adds `2^15 / SPS` more per cycle. That is
exactly half a turn (π) over the symbol, so 1/(2T) of extra frequency. A tag
bit 0 adds nothing. The phase stays continuous, and the accumulator restarts
at zero when the shift is switched on.

## Blocks

| module                  | role                                                                  |
|-------------------------|-----------------------------------------------------------------------|
| `pble_pkg`              | PHY and field enums; BLE field sizes; CRC polynomial                  |
| `preamble_detector`     | two-flop input synchroniser, edge detector, run counter with ±`TOL` spacing → `sync_pulse` |
| `address_decoder`       | slot latching, n-symbol majority, group check, compare with `tag_id`  |
| `tx_sequencer`          | free-running symbol grid after sync, field walk, buffer reads, pre-CRC control, hold-off, wake-up circuit enable |
| `payload_buffer`        | 241 × 8 dual-port RAM, registered read                                |
| `pre_crc`               | zero-initialised CRC-24 LFSR, serial in, serial out                   |
| `backscatter_modulator` | phase-accumulator square wave with +π per 1 bit                       |
| `passiveble_tag`        | top: wires the above                                                  |

Top-level ports of `passiveble_tag`:

* `comp_in` is the comparator output. It is asynchronous.
* `rf_sw` is the RF switch control.
* `sync_en` enables the analog wake-up circuit. It is low from address match to
  the end of the packet, since that circuit is not needed while transmitting.
* `phy_2m` selects the PHY mode.
* `tag_id` is the tag's 4-bit address.
* `payload_len`, `wr_en`, `wr_addr` and `wr_data` load the payload buffer.
  Write it while the tag is idle.
* `wake`, `activated`, `tx_busy`, `tx_done`, `rx_addr` and `field` are status
  outputs.

## Timing

One clock is assumed at 64 MHz, so a symbol lasts `SPS_1M` = 64 cycles in
LE 1M and `SPS_2M` = 32 cycles in LE 2M. The timing chain runs as follows:

* The correlator accepts pulse spacings of one symbol ± `TOL` = 4 cycles. That
  allows ±2 cycles (±31 ns) of jitter on each comparator pulse.
* `sync_pulse` comes 3 cycles after the comparator edge into the last preamble
  symbol. That is well within the 10.4 µs from packet start to detection that
  the original prototype measured.
* The sequencer places each tag symbol boundary `LAT = FE_DELAY + 3` cycles
  before the observed pulse grid. That is where the excitation symbol edge
  really is.
* `tag_bit` changes one cycle after that boundary, and `rf_sw` follows one
  cycle later.

The symbol grid free-runs from the preamble to the end of the packet. The
clock must therefore hold the symbol timing of a 241-byte packet, about
2000 symbols. Re-synchronisation inside the packet is not implemented.

## What follows the source design and what is chosen here

These points follow the design as published:

* preamble-based wake-up from a delay-and-mix front end and a comparator;
* tag addressing through the Access Address with n = 8 symbols per address
  bit, a run of equal symbols for 0 and alternating symbols for 1, giving 16
  tags;
* the field layout, with 7 or 8 re-allocated bytes and a payload of 0–241
  bytes;
* the trigger at the end of the header;
* the zero-init CRC split and the whitening left to the source;
* the square-wave frequency shift with tag bit 1 = π and tag bit 0 = 0;
* the synchronisation circuit switched off while transmitting.

These are this implementation's own choices: the 64 MHz clock, f_s = 6 MHz,
the pulse model of the comparator output, the correlator tolerance, the
majority rule with
`ERR_TOL`, the LSB-first address order, the 24-symbol hold-off, the linear
phase ramp used to apply π, the payload length as an input, and the CRC and
payload bit order taken from BLE practice.

Limits to keep in mind:

* A clock-derived square wave cannot reach shifts above half the clock, so the
  default build does not cover a shift of tens of MHz.
* Another tag's payload can wake this tag and occasionally pass the address
  check.
* There is no drift correction within a packet.
* Connection management, channel hopping and the pre-encoding all live in the
  excitation source's firmware. The tag neither knows nor needs the channel.

## Simulation

Every testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`. Build and run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_passiveble_tag \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/pble_pkg.sv tb/pble_tb_pkg.sv tb/tb_passiveble_tag.sv
./obj_dir/Vtb_passiveble_tag
```

Substitute another `tb_*` module for the unit tests. `tb/pble_tb_pkg.sv` holds
the reference models. They are written from the BLE rules, independently of
the RTL:

* the CRC-24 as the BLE specification draws it;
* the whitening LFSR;
* the address code;
* an excitation-source packet builder, which computes `E_seq`;
* a comparator pulse generator with delay and jitter;
* a receiver check that de-whitens the tag packet and verifies header, payload
  and CRC against `CRC_Init`.

The testbenches:

* `tb_passiveble_tag` runs the top at its default parameters through a hopping
  connection. It uses LE 1M and LE 2M, payloads from 0 bytes to the largest,
  packets for other tags and noise. It finishes with one advertising packet on
  channel 37. It recovers the tag bits from the phase of `rf_sw`,
  XORs them with the excitation symbols and decodes the result as a phone
  would.
* `tb_multi_tag` puts several tags on one excitation source and addresses them
  in turn.
* The unit testbenches check each block against cycle counts worked out from
  the field sizes.
