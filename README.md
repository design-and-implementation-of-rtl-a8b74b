# A point-to-point IEEE 802.15.4 MAC and baseband in SystemVerilog

This is a small subset of IEEE 802.15.4, the low-rate wireless PAN standard
under ZigBee. It is enough for two devices to exchange data frames and
acknowledgment frames over one link. All of it is synthesizable and runs
from a single 100 MHz FPGA clock. One node has four parts:

* a **transmitter** that builds the frame, spreads it with the 2.4 GHz
  O-QPSK PHY's 32-chip PN codes and puts it on the "air" port as a stream of
  32-bit words;
* a **receiver** that undoes each of these steps, checks the frame and
  stores its payload;
* a **MAC controller** that sends acknowledgments, waits for them and
  retransmits;
* a **clock divider** that brings the 100 MHz clock down to the 250 kHz
  rate the datapath runs at.

The RTL follows the design in N. S. Bhat, "Design and Implementation of IEEE
802.15.4 Mac Protocol on FPGA" (ICEMC2 2011). That source gives the block
diagram, the frame format, the spreading rules and some simulation
waveforms. It leaves out many details, such as widths, handshakes and
timers. Where it is silent, this design fills in with the IEEE 802.15.4
conventions or its own simple choices. Every such choice is listed in
[Departures and choices](#departures-and-choices).

One warning first. The "modulation" here is not a physical O-QPSK waveform.
Following the source, a 16-bit sine and cosine are *added* to 32-bit chip
words (see [The carrier stage](#the-carrier-stage-sine-and-cosine-added-to-chip-words)).
The receiver subtracts the same values again. The stage is exactly
reversible, but it is not a radio signal. A real radio (a ZigBee
transceiver) would sit on the air ports, and it is not part of this RTL.

## Signal chain

```
 transmitter                                                         air port
 ┌──────────────┐ octets ┌─────────────┐ 4 bit ┌──────────────┐ 32 bit ┌──────────────┐
 │frame_builder │──────▶│bit_to_symbol│──────▶│symbol_to_chip│──────▶│ iq_modulator │──▶ air_tx_data[31:0]
 │ (+crc16)     │        └─────────────┘       └──────────────┘        │ I reg, Q reg │    air_tx_valid
 └──────────────┘                                                      │ + sine_wave_ │
                                                                       │   gen        │
                                                                       └──────────────┘
 receiver
 ┌──────────────┐ 32 bit ┌──────────────┐ 4 bit ┌──────────────┐ octets ┌──────────────┐
 │iq_demodulator│──────▶│chip_to_symbol│──────▶│symbol_to_byte│──────▶│ frame_parser │──▶ header, payload
 │ - sine/cos   │        │ (min Hamming)│       └──────────────┘        │ FCS, filter  │    buffer
 └──────────────┘        └──────────────┘                                └──────────────┘
        ▲ air_rx_data[31:0], air_rx_valid

 mac_ctrl: host request → transmitter → wait for ACK → retry / done
           accepted data frame with ACK request → ACK frame after turnaround
 clk_div:  100 MHz → 250 kHz clock-enable "tick"
```

Everything is in the single `clk` domain. The datapath moves forward only
on `tick`, a one-clock pulse every 400 clocks. Between the transmit stages
there are valid/ready handshakes. The modulator pulls one chip word every
four ticks, and every stage before it waits for that pull. In the receiver,
each stage passes its result on as a one-clock strobe.

## Rates

| quantity | value | where it comes from |
|---|---|---|
| board clock | 100 MHz | source |
| datapath tick | 250 kHz (`DIV` = 400) | source: "the design has to run only in 250 KHz" |
| bit rate | 250 kbit/s, one bit per tick | 2.4 GHz PHY |
| symbol rate | 62.5 ksymbol/s, 4 ticks per symbol (`SYM_TICKS`) | 4 bits per symbol |
| chip rate | 2 Mchip/s, carried 32 chips at a time | 32 chips per symbol |
| air time of a frame | 8 ticks (32 µs) per PPDU byte | follows from the above |

An acknowledgment frame is 11 PPDU bytes long and takes 88 ticks (352 µs) on
air. A maximum-size frame (127-byte PSDU, 133 PPDU bytes) takes 1064 ticks
(4.256 ms).

## Frame format

`frame_builder` sends, and `frame_parser` expects, the standard PPDU. All
multi-byte fields are sent least significant byte first.

| field | bytes | content |
|---|---|---|
| preamble | 4 | `0x00` |
| SFD | 1 | `0xA7` |
| length | 1 | MPDU length, 5..127 |
| frame control (FCF) | 2 | bits 2:0 frame type (1 data, 2 ack), bit 5 ack request, bit 6 PAN-ID compression, bits 11:10 destination address mode, bits 15:14 source address mode |
| sequence number | 1 | |
| addressing | 0..20 | dest PAN (2), dest address (2 or 8), source PAN (2, left out when compressed), source address (2 or 8), each present when its address mode says so |
| payload | 0..124 | from the transmit payload buffer |
| FCS | 2 | CRC-CCITT of FCF through payload |

The header travels between blocks as `mac154_pkg::mac_hdr_t`. This struct
has the FCF, the sequence number, both PANs and both addresses. A short
address uses bits 15:0 of its 64-bit field. `hdr_layout()` turns an FCF into
field lengths, and `hdr_byte()` gives byte *i* of the serialised header. The
builder and the parser both use these two functions, so the two ends always
agree on the layout.

The FCS follows the standard's CRC convention, which the source only names
as "CRC-CCITT":

* polynomial x¹⁶+x¹²+x⁵+1, used in its reflected form `0x8408`;
* initial value 0, with bits fed in least significant first;
* no final inversion.

This is the CRC-16/KERMIT variant. Its check value for `"123456789"` is
`0x2189`. If a received MPDU, FCS included, is run through the same
register, the result is zero.

The builder refuses a request whose MPDU would exceed 127 bytes. It pulses
`len_err` and sends nothing. The parser reports a frame with four outputs:

* `crc_ok`;
* `accept`, which means the FCS is good, the frame type is data or
  acknowledgment, and the destination matches the node's PAN and address or
  is broadcast `0xFFFF`;
* the decoded header;
* the payload length.

The payload stays in the receive buffer until the next frame overwrites it.

## Spreading

**Bit to symbol.** Each octet becomes two 4-bit symbols, bits 3:0 first and
then bits 7:4. The receiver's `symbol_to_byte` pairs the symbols back
together. It starts pairing again at the first symbol of every burst.

**Symbol to chip.** Each symbol becomes a 32-chip word. Chip c0 is in bit 0,
so symbol 0 is `32'h744AC39B`. The table is not stored. `chip_word()` in
`mac154_pkg` builds it from the standard's rule:

```
chip_word(s) = rotl(32'h744AC39B, 4*(s mod 8))  XOR  (s >= 8 ? 32'hAAAAAAAA : 0)
```

Symbols 1..7 are symbol 0 shifted cyclically by 4 chips per step. Symbols
8..15 are symbols 0..7 with every odd-indexed chip inverted. The testbench
checks this formula against the standard's table, typed out chip by chip.

**Despreading.** `chip_to_symbol` compares the received word with all 16
code words. It picks the one with the fewest differing chips, and the lower
symbol wins a tie. It also reports that count as `dist`. The receiver keeps
the worst count of the current frame as `max_dist`, a simple link-quality
figure. Any two code words differ in at least 12 chips, so up to 5 chip
errors per symbol are always corrected.

## The carrier stage: sine and cosine added to chip words

This is the least conventional part of the design. It follows the source's
transmitter diagram and its simulation waveforms rather than a textbook
modulator.

**Sine wave generator** (`sine_wave_gen`). An 8-bit phase register indexes a
quarter-wave table of 65 entries. The other quadrants come from symmetry.
COSINE is the SINE read 64 steps ahead. Both are 16-bit two's complement
with amplitude 16384, over 256 steps per period:

* SINE(k) = round(16384·sin(2πk/256)), giving 0000, 0192, 0324, …;
* COSINE(k) = round(16384·cos(2πk/256)), giving 4000, 3FFB, 3FEC, ….

The table is computed during elaboration by a Q28 Taylor series, so no
numbers are pasted into the source. The generator restarts at phase 0 when
a burst starts and advances one step per tick.

**I and Q registers** (`iq_modulator`). Each chip word goes into two
registers:

* `chip_i_phase` loads the word on the first tick of the symbol;
* `chip_q_phase` copies `chip_i_phase` on every tick, so it holds the same
  word one tick later.

That one-tick lag is the design's version of the O-QPSK rule that Q chips
are delayed by one chip time Tc from I chips. One tick is eight chip times,
so the lag is coarser than Tc. Both registers hold the whole 32-bit word, as
in the source's waveforms. What makes one of them "I" and the other "Q" is
which chips the receiver takes from it: even-indexed chips from I and
odd-indexed chips from Q, matching the standard's I/Q assignment.

**Addition and output.** The I word plus SINE and the Q word plus COSINE are
multiplexed onto `air_tx_data`, one word per tick. The values are
sign-extended and added modulo 2³². Symbol *n* of a burst takes ticks
4n..4n+3:

| tick in symbol | 0 | 1 | 2 | 3 |
|---|---|---|---|---|
| `chip_i_phase` | word n | word n | word n | word n |
| `chip_q_phase` | word n−1 | word n | word n | word n |
| `air_tx_data` | I + SINE(k) | Q + COSINE(k) | I + SINE(k) | Q + COSINE(k) |

Here k is the tick count since the start of the burst. For symbol 0 of a
frame (word `744AC39B`), the first ticks give `744AC39B`, then
`744AC39B + 3FFB`, and so on. The source's waveform shows the same kind of
sums, for example `744AC39B + 0192 = 744AC52D`. `air_tx_valid` is high for
exactly 8 ticks per PPDU byte.

**Receiver** (`iq_demodulator`). The receiver samples the input once per
tick while `air_rx_valid` is high. It counts samples from the start of the
burst and labels them I, Q, I, Q within each symbol. Its own sine wave
generator is reset whenever a tick finds no burst, and it advances once per
sample. This keeps it in step with the transmitter's generator without any
timing recovery. The receiver subtracts SINE from the I samples and COSINE
from the Q samples. On the symbol's last tick it rebuilds the word from two
parts:

```
chip = (I word of tick 2 & 32'h55555555) | (Q word of tick 3 & 32'hAAAAAAAA)
```

Because the receiver subtracts exactly what the transmitter added, a clean
link returns every chip word unchanged.

This synchronisation relies on the words reaching the receiver one per tick,
with no gaps, from the first preamble word onward. Any fixed phase offset
between the two nodes' ticks is fine. A lost or extra word is not: the
sine/cosine removal then goes wrong for the rest of the burst. A design
facing a real channel would need carrier and symbol timing recovery in place
of this stage. The source does not describe any.

## MAC controller

`mac_ctrl` sequences the two frame types the link uses.

* **Sending.** `host_req` latches a header and a payload length. The payload
  has already been written into the transmitter's buffer through `pl_*`. The
  controller starts the frame and waits until it has left the air. If FCF
  bit 5 (ack request) is clear, `host_done` pulses with `host_ack_ok = 1`.
  Otherwise the controller waits up to `ACK_WAIT_TICKS` (216 ticks, 54
  symbol periods) for an accepted acknowledgment frame carrying the same
  sequence number. If none arrives, it sends the frame again, up to
  `MAX_RETRIES` = 3 times. It then reports `host_ack_ok = 0` and
  `host_retries = 3`.
* **Answering.** An accepted data frame with the ack-request bit set
  schedules an acknowledgment: FCF `0x0002`, the same sequence number, no
  addresses and no payload. It is sent `TURNAROUND_TICKS` (48 ticks, 12
  symbol periods) after the frame ended, as soon as the transmitter is free.
  A pending acknowledgment goes ahead of a new host frame.

The timer values are the standard's defaults (macAckWaitDuration,
aTurnaroundTime, macMaxFrameRetries). There is no CSMA-CA back-off and no
beacon or superframe: the link has only two nodes, and the controller sends
as soon as the transmitter is free.

## Module reference

| file | role |
|---|---|
| `rtl/mac154_pkg.sv` | constants (SFD, preamble, chip base word), `mac_hdr_t`, FCF helpers, `hdr_layout`, `hdr_byte`, `chip_word`, `crc16_byte` |
| `rtl/clk_div.sv` | `tick` every `DIV` clocks |
| `rtl/crc16_ccitt.sv` | byte-wide FCS register |
| `rtl/frame_builder.sv` | PPDU byte stream from header and payload buffer (128 bytes) |
| `rtl/bit_to_symbol.sv` | octet → two symbols, valid/ready |
| `rtl/symbol_to_chip.sv` | symbol → 32-chip word, one register stage |
| `rtl/sine_wave_gen.sv` | 16-bit SINE/COSINE, 256 steps |
| `rtl/iq_modulator.sv` | I/Q registers, sine/cosine addition, word multiplexer, `underrun` flag |
| `rtl/transmitter.sv` | the transmit chain |
| `rtl/iq_demodulator.sv` | sample de-serialiser, sine/cosine removal, chip recombination |
| `rtl/chip_to_symbol.sv` | minimum-distance despreader |
| `rtl/symbol_to_byte.sv` | two symbols → octet |
| `rtl/frame_parser.sv` | SFD search, header decode, FCS check, filter, payload buffer |
| `rtl/receiver.sv` | the receive chain |
| `rtl/mac_ctrl.sv` | data/acknowledgment sequencing |
| `rtl/ieee802154_node.sv` | **top**: one node |

The top's parameters are `DIV` (400), `MAX_PAYLOAD` (127), `SYM_TICKS` (4),
`ACK_WAIT_TICKS` (216), `TURNAROUND_TICKS` (48) and `MAX_RETRIES` (3, at
most 3). `SYM_TICKS` must be a power of two of at least 2, and both ends of
a link must use the same value. A node's ports are:

* configuration: `my_pan`, `my_short`, `my_ext`;
* host transmit: `pl_*`, `host_*`;
* host receive: `rx_ind`, `rx_hdr`, `rx_len`, `rx_crc_err`, `rx_rd_*`,
  `rx_max_chip_err`;
* radio: `air_tx_*`, `air_rx_*`;
* monitoring strobes: `tick`, `tx_underrun`, `tx_len_err`, `ack_sent`,
  `ack_timeout`, `chip_i_phase`, `chip_q_phase`.

Two nodes form a link when each one's `air_tx_data`/`air_tx_valid` drives
the other's `air_rx_data`/`air_rx_valid`.

Synthesised, one node comes to about 1,100 flip-flops, two 128-byte buffers
and roughly 1,200 word-level cells. The largest piece of logic is the
despreader's 16 parallel 32-bit Hamming distances.

## Testbenches

Each module has a self-checking testbench in `tb/`. Each one compares the
module against models written independently of the RTL, kept in
`tb/tb154_pkg.sv`:

* the 16 chip sequences typed out from the standard;
* a non-reflected, bit-serial CRC;
* a PPDU assembler;
* `$sin` in real arithmetic.

Every testbench ends with a line `TB_RESULT checks=N failures=M`.

| testbench | what it establishes |
|---|---|
| `tb_clk_div` | tick period 400 clocks, first tick 400 clocks after reset |
| `tb_crc16_ccitt` | check value 0x2189, random messages against the model, zero residue |
| `tb_bit_to_symbol`, `tb_symbol_to_byte` | nibble order, `last`/`first` handling, back-pressure, burst restart |
| `tb_symbol_to_chip` | all 16 words against the typed table, latency, stall |
| `tb_chip_to_symbol` | clean words decode with distance 0; 1..5 random chip errors are corrected and counted |
| `tb_sine_wave_gen` | 512 steps against `$sin`/`$cos`, the first values listed above, hold and clear |
| `tb_iq_modulator` | every output word, the one-tick Q lag, 4 ticks per symbol, underrun |
| `tb_iq_demodulator` | chip recovery when the I word's odd chips and the Q word's even chips are scrambled; two bursts |
| `tb_frame_builder` | byte-exact PPDUs for five addressing variants up to a 127-byte MPDU; oversize refusal |
| `tb_frame_parser` | header, payload, FCS, address filter, frame-type comparison, burst restart mid-frame |
| `tb_mac_ctrl` | ack match and mismatch, retry spacing of 216 ticks, 3 retries, 48-tick turnaround |
| `tb_transmitter`, `tb_receiver` | whole chains against the reference words on air, chip-error correction, FCS error |
| `tb_ieee802154_node` | two nodes at default parameters; see below |
| `tb_workload_frame54` | one acknowledged 54-byte MPDU with 64-bit addresses at default parameters: 480-tick burst, length-byte chip words, 88-tick acknowledgment, full payload |

`tb_ieee802154_node` runs two nodes at default parameters, with the real
100 MHz clock and 250 kHz tick, through a channel model. It covers these
cases:

1. an acknowledged frame, including its air time;
2. a lost first attempt followed by a retransmission;
3. a frame that asks for no acknowledgment;
4. bit errors on air that the despreader corrects;
5. a corrupted symbol, so FCS errors until the retries run out;
6. a foreign destination address;
7. a maximum-size (127-byte MPDU) frame with 64-bit addresses in the other
   direction.

It counts each mechanism (acknowledgment sent, timeout, retransmission, FCS
error, corrected chips, address filter) and fails if any of them never
happened. It takes about 2 s of wall time.

To run one of them with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/mac154_pkg.sv tb/tb154_pkg.sv tb/tb_ieee802154_node.sv \
    --top-module tb_ieee802154_node -o sim
./obj_dir/sim
```

Replace the testbench name to run any other one.

## Departures and choices

What follows the source directly:

* the PPDU layout, the 0x00 preamble, the SFD 0xA7 and a PSDU of at most
  127 bytes;
* the low-nibble-first symbol order and the 32-chip spreading;
* the 100 MHz → 250 kHz divider;
* the block order of the transmitter and receiver diagrams;
* 16-bit SINE/COSINE added to the I and Q words and subtracted in the
  receiver;
* the step size and amplitude of the sine. The source shows only the
  values; this design derives the 256-step, 16384-amplitude rule from them;
* the acceptance of a frame only after its frame control has been compared.

Where the source conflicts with itself:

* **Even/odd chips.** The transmitter diagram labels the two paths "32-Bit
  Even Values" and "32-Bit Odd Values", and the text puts even chips on I
  and odd chips on Q. The simulation, however, shows the full chip word in
  both registers. The design keeps full words in both registers and applies
  the even/odd split in the receiver.
* **Half-sine samples.** The source's test-data section describes a
  different, conventional sample format: four 16-bit half-sine samples per
  chip, Q delayed by two samples, I and Q summed. That generator was test
  equipment and does not match the word format of the receiver it shows. It
  is not implemented.

This design's own choices, where the source is silent:

* a clock enable instead of a divided clock;
* valid/ready handshakes in the transmit chain;
* the I/Q offset of one tick instead of one chip time;
* the I, Q, I, Q tick order;
* carrier alignment by restarting both generators at the start of a burst;
* minimum-distance despreading;
* SFD accepted after a single 0x00 byte;
* a smallest accepted MPDU of 5 bytes, the size of an acknowledgment. The
  source allows a PSDU of 2 to 127 bytes, but no frame the header format
  here can express is shorter than 5;
* a 128-byte payload buffer on each side, written and read through simple
  ports;
* the addressing layout, FCF bit positions and CRC convention, taken from
  IEEE 802.15.4;
* the destination address filter;
* the whole MAC controller and its timer values.

Not built:

* the RF transceiver;
* CSMA-CA, energy detection, beacons, superframes and guaranteed time slots;
* security (the auxiliary security header);
* association;
* the 868/915 MHz BPSK PHYs.

The source describes these only as background to the standard.

Limits to keep in mind:

* The receiver has no timing recovery (see the carrier stage).
* The controller holds one acknowledgment at a time. If a second data frame
  asks for one before the first has been sent, only the newer one is
  answered.
* A host request whose MPDU would exceed 127 bytes is refused. The builder
  pulses `tx_len_err`, and the controller reports `host_done` with
  `host_ack_ok = 0` without retrying.
