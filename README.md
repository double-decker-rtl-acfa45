# Double-decker: backscatter that one commodity receiver can decode

A backscatter tag sends data by reflecting someone else's radio packet and
changing it on the way: it flips the phase of each reflected symbol, or
shifts its frequency, so that a valid codeword of the carrier becomes another
valid codeword. The receiver then sees a packet whose bits are the carrier's
bits XOR the tag's bits. Earlier systems of this kind needed a second
receiver to capture the unmodified carrier as well, so that the XOR could be
undone.

Double-decker removes the second receiver by giving up some rate. The packet
payload is cut into **data chips**. Every symbol of a chip carries the same
*productive* (carrier) value, because the transmitter repeats it. The first
part of a chip, the **pilot part**, is never touched by the tag. The rest of
the chip, the **data parts**, carry one tag bit each. A single ordinary
receiver demodulates the backscattered packet and then:

* reads the productive value from the pilot part, and
* reads each tag bit as "pilot part XOR data part".

This repository holds synthesizable SystemVerilog for the three pieces of
logic the scheme needs: the transmit-side spreading of productive data, the
tag's framing and modulation control, and the receiver-side decoding. The
RF parts (envelope detector, RF switch, radios, clock manager) are outside
the logic and appear as ports.

## Data chips per carrier

A data chip of size lambda is lambda excitation symbols long. In the
default mode (mode I) it is one pilot part of lambda/2 symbols followed by
one data part of lambda/2 symbols.

| Carrier   | Symbol                | lambda | Pilot / data part       | Preamble left alone | Decoding window per part |
|-----------|-----------------------|--------|-------------------------|---------------------|--------------------------|
| 802.11b   | 1 bit, 1 us           | 16     | 8 bits                  | 192 us              | all 8 bits               |
| 802.11g   | OFDM symbol, 24 bits, 4 us | 4 | 2 OFDM symbols = 48 bits | 20 us              | bits 16..35 (20 bits)    |
| ZigBee    | 4-bit symbol, 16 us   | 6      | 3 symbols               | 192 us (*)          | all 3 symbols            |
| BLE       | 1 bit, 1 us           | 24     | 12 bits                 | 56 us (*)           | all 12 bits (*)          |

(*) this design's choice: the ZigBee and BLE preamble lengths come from the
802.15.4 and BLE frame formats (SHR+PHR; preamble, access address and PDU
header), and the BLE window is the whole part. Everything else in the table
is the published scheme. The table lives in `rtl/dd_pkg.sv`
(`tag_cfg_of`, `dec_cfg_of`); changing a lambda or a window is a one-line
edit there.

**Modes.** The split between productive and tag throughput is set by how
many data parts share one pilot part:

* mode I: pilot, data (1 tag bit and 1 productive symbol per chip);
* mode II: pilot, data, data, data (3 tag bits per chip, half the
  productive rate of mode I, 1.5 times its tag rate);
* mode III: one pilot part at the start of the payload, then data parts to
  the end of the packet (one productive symbol per packet, maximum tag rate).

In modes II and III every data part has the length of the pilot part. In
mode III the single pilot part also keeps the mode I length (lambda/2
symbols). The scheme's prose speaks of "the first symbol" as the pilot in
that mode, while its mode diagram draws pilot and data cells of equal size;
the RTL follows the diagram, and `part_symbols` in `dd_pkg` is the place to
change it.

## Why a decoding window

For 802.11b, BLE and ZigBee the received units of a part are compared one by
one with the pilot reference. 802.11g is harder: its convolutional (BCC)
coding mixes neighbouring bits, so a phase flip that starts at an OFDM symbol
boundary does not turn the decoded bits into a clean all-ones pattern. The
bits near the part boundaries come out mixed, while the bits in the middle
of each two-symbol part come out as expected: all zeros where the tag left
the carrier alone and all ones where it flipped. The decoder therefore looks
only at a 20-bit window in the middle of each 48-bit part. The window starts
16 bits in, so it covers the last 8 bits of the first OFDM symbol and the
first 12 bits of the second. Everything outside the window is ignored, and
the testbenches fill it with random bits.

## Decoding rule (`chip_decoder`)

The decoder works on the stream the commodity receiver delivers after the
PHY header: one unit per `rx_valid`, where a unit is a bit, or a 4-bit
symbol for ZigBee. It keeps only counters, not a buffer:

1. **Pilot part.** For each of the (up to) 4 bit positions it counts the
   ones among the window units. The per-bit majority is the reference unit.
   It is output as the chip's productive symbol (`prod_valid`, `prod_sym`).
2. **Each data part.** It counts the window units that differ from the
   reference. **Tag bit = 1 when more than half of the window differs.**

This majority rule is the redundancy that lets a chip survive bursty bit
errors. On 802.11b, pilot `00000000` with data `11110110` gives 6 of 8
differing, so the bit is 1. Pilot `11111111` with data `11111111` gives 0.
On ZigBee a phase-flipped symbol is not a valid codeword, and the radio
demodulates it as whatever symbol matches best, sometimes the original one.
Pilot `0000 0000 0000` with data `0000 1110 1001` has 2 of 3 symbols
differing, so the bit is 1. Ties decode as 0. A packet that ends (`rx_end`)
in the middle of a part produces no output for that part.

Timing: `prod_valid` or `tag_valid` pulses one clock after the last unit of
its part was accepted. The decoder takes one unit per clock at most and
accepts any gaps between units.

## The tag (`double_decker_tag`)

```
comp_in ──► packet_detector ──pkt_start/pkt_active──► chip_controller ──mod──► codeword_translator ──► sw_ctrl
                                                          ▲                        ▲   ▲   ▲
                                        tag_valid/tag_bit ┘     clk_shift, clk_shift_180, clk_shift_alt
```

**packet_detector.** The envelope comparator output is asynchronous. It is
synchronised with two flops, and a packet is declared after `DET_CYCLES`
(default 50 = 0.5 us) consecutive high samples. It is declared over after
`END_CYCLES` (default 400 = 4 us) consecutive low samples, which bridges
envelope dips. `pkt_start` reaches the controller `DET_CYCLES + 2` clock
edges after the comparator was first sampled high.

**chip_controller.** This is the heart of the tag. It counts cycles, so the
timing is exact to one system clock (`CLK_PER_US`, default 100, i.e.
100 MHz):

* The preamble wait is reduced by the detector latency. The first pilot
  symbol therefore starts exactly `preamble_us x CLK_PER_US` cycles after the
  packet was first sampled. For 802.11b that is 19,200 cycles (192 us).
* Then parts of `part_symbols x symbol_us` follow back to back. On 802.11b
  and 802.11g a data chip lasts 16 us, so the tag's raw rate is 62.5 kbit/s
  while a packet is on air.
* On the first cycle of each data part the controller takes one tag bit
  from the valid/ready stream (`tag_ready` pulses). `mod` follows that bit
  for the whole part. With no bit waiting, the part stays unmodulated and
  `tag_underflow` pulses. The receiver then decodes a 0 there.
* `mod` is never high outside a data part. This is checked by an assertion.
* When `pkt_active` drops, the controller returns to idle. If that happens
  during the payload, `chip_abort` pulses.

**codeword_translator.** The RF switch is not driven by a synthesised
waveform. It is driven by clocks from the FPGA clock manager:

* `clk_shift` toggles the switch at the channel-shift frequency, which moves
  the reflection onto another channel, away from the excitation.
* For a tag bit 1 on a PSK carrier (802.11b/g, ZigBee), the drive changes to
  `clk_shift_180`, the same clock shifted by 180 degrees.
* For a tag bit 1 on BLE, the drive changes to `clk_shift_alt`, a clock
  500 kHz away. This turns the GFSK tone f0 into f1 and back.

The change of clock uses the standard glitch-free clock multiplexer. Each
clock's select is a two-flop chain clocked on that clock's falling edge. A
select can only rise once the other select has fallen. So the switch never
sees a pulse shorter than half a shift period. During a change-over it rests
low for up to about one period, which is well below a symbol (at least 1 us).
The whole packet is reflected, preamble included, so that the receiver on the
shifted channel can lock onto it. The shift frequency and the BLE offset are
properties of the clocks fed in, not of the RTL.

## The transmitter side (`chip_spreader`)

The pilot part can serve as a reference only if the pilot and data parts of
a chip were sent with the same content. `chip_spreader` takes productive
symbols one per chip (`prod_ready`). It repeats each one over 2 parts
(mode I) or 4 parts (mode II), or over the whole payload (mode III). It hands
out one unit per `tx_ready`. For 802.11g a unit is one payload bit, so a
productive bit fills 96 bits (4 OFDM symbols). Scrambling works bit by bit
and interleaving stays inside an OFDM symbol, so neither one gets in the way.
A chip that starts with no productive symbol waiting is sent as zeros and
flagged with `prod_underflow`.

## Top level (`double_decker`)

The top places the spreader, the tag and the decoder side by side. All three
are configured with the same `proto` (`dd_pkg::proto_e`) and `mode`
(`dd_pkg::chip_mode_e`). They share one clock, `clk`. The tag also takes the
three shift clocks. In a deployment the three parts sit in three different
devices. The radio path between them is where the ports stop:

| Port group | Connects to |
|------------|-------------|
| `tx_prod_*`, `tx_start`, `tx_ready`, `tx_valid`, `tx_sym` | productive data source, and the commodity transmitter's payload |
| `comp_in` | envelope detector + comparator on the tag |
| `clk_shift`, `clk_shift_180`, `clk_shift_alt` | clock manager outputs |
| `tag_valid`, `tag_bit`, `tag_ready` | tag data source (sensor) |
| `sw_ctrl` | RF switch control |
| `rx_start`, `rx_valid`, `rx_sym`, `rx_end` | demodulated payload from the commodity receiver |
| `prod_valid`, `prod_sym`, `rx_tag_valid`, `rx_tag_bit` | decoded productive data and tag data |

Status outputs (`pkt_active`, `pkt_end`, `mod`, `phase`, `chip_start`,
`chip_abort`, `tag_underflow`) show what the tag is doing.

Parameters: `CLK_PER_US` (100), `DET_CYCLES` (50), `END_CYCLES` (400). All
three are this design's choices. The paper gives no clock rates or detector
timing.

## Throughput cross-checks

* BLE: the modulatable part of a broadcast packet is 37 bytes, or 296 bits.
  With lambda = 24 that holds 12 complete chips, so 12 tag bits per packet.
  At 70 packets/s that is 840 bit/s, close to the 0.88 kbit/s measured for
  the original prototype.
* 802.11b/g: a 16 us chip caps the tag rate at 62.5 kbit/s while a packet
  is on air. Measured rates (about 25 and 35 kbit/s) include gaps between
  packets, which this logic does not model.
* The mode II rule (3 of 4 parts carry tag bits, 1 productive symbol per 4
  parts) gives 1.5 times the tag rate and half the productive rate of
  mode I. On a 1500-byte 802.11g packet the RTL gives 1.496 and 0.504
  (`tb_workloads`); the prototype's measured ratios were 1.478 and 52.3 %.

## What is taken from the scheme and what is this design's own

Taken from the published scheme: data chips made of pilot and data parts;
lambda = 16, 4, 6, 24; the 192 us and 20 us preambles; 24-bit 4 us OFDM
symbols and 16 us ZigBee symbols; the 20-bit window and its position; the
XOR of pilot and data; modes I to III with 1 and 3 tag bits per chip; the
180 degree and 500 kHz translations; driving the switch from clock-manager
clocks; spreading each productive symbol over a chip.

This design's own choices:

* the majority vote as the way to combine the units of a part. The scheme
  only says "redundancy", but this rule reproduces its worked examples;
* data parts in modes II/III having the pilot part's length;
* all interfaces (valid/ready streams, start/end pulses);
* underflow and abort behaviour;
* the detector's debounce scheme;
* the glitch-free clock switching;
* the 100 MHz system clock;
* the ZigBee and BLE preamble lengths and the BLE window.

Known gaps:

* The prototype decodes on a laptop and on TI radios in software. Here the
  decoder is logic that expects the already-demodulated bit stream.
* Packet-level framing on the receiver (finding `rx_start`) is left to the
  radio.
* The ZigBee throughput reported for the prototype (1.05 kbit/s at 20
  packets/s, i.e. about 52 tag bits per packet) does not fit lambda = 6 in
  mode I within a 127-byte frame (at most 42 chips). The RTL follows lambda
  = 6.

## Simulating

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. With
Verilator 5, from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl +libext+.sv \
    rtl/dd_pkg.sv tb/tb_double_decker.sv --top-module tb_double_decker -o sim
./obj_dir/sim
```

Replace the testbench name to run another one.

| Testbench | What it establishes |
|-----------|---------------------|
| `tb_packet_detector` | spike rejection, gap bridging, exact start/end latency |
| `tb_chip_controller` | per-symbol phase and `mod` for all carriers and modes against a layout model; exact first-pilot cycle; underflow; abort |
| `tb_codeword_translator` | idle without packet; 0 deg / 180 deg / alternative-clock following; no pulse shorter than half a period |
| `tb_chip_decoder` | productive symbols and tag bits for all carriers and modes, with random gaps, garbage outside the window and a minority of corrupted window units; truncated packets |
| `tb_chip_spreader` | repetition over chips in all modes under back-pressure; one symbol per chip; underflow |
| `tb_double_decker_tag` | 802.11b packet from comparator to switch: first pilot at 192 us, 16 us chips, switch phase per part |
| `tb_workloads` | full packets at default parameters: BLE with a 37-byte modulatable part (12 tag bits), 802.11g with a 1500-byte payload in modes I/II/III (125/187/249 tag bits, 125/63/1 productive symbols), 802.11b with 1500 bytes (750 chips), ZigBee with a 127-byte frame (42 chips) |
| `tb_double_decker` | end to end at default parameters: all carriers in all modes. The spread payload is modulated by the tag's actual switch drive, as judged from `sw_ctrl`, then corrupted the way a receiver would see it and decoded. Every mechanism (phase flip, frequency shift, underflow, abort, window garbage) is counted and must occur. |

The testbenches use only `$urandom`. All of them finish within a few seconds;
`tb_workloads`, about 24 ms of simulated air time, is the longest.
