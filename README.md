# A register-controlled IEEE 802.15.4 PHY for cross-layer radio prototyping

Radio chips hide their physical layer from the MAC: you cannot change how a
frame is spread or shaped, and you cannot react to the exact moment a frame
starts. The WiSCoP platform (Kazaz, Jiao, Kulin, Moerman, "Demo: WiSCoP –
Wireless Sensor Communication Prototyping Platform") gets around this. It runs
the IEEE 802.15.4 2.4 GHz PHY in the FPGA fabric of a Zynq SoC and the MAC in
software on the ARM cores beside it. Every PHY setting sits in a register, and
the PHY raises interrupts at precise events.

This repository holds synthesizable SystemVerilog for the programmable-logic
part of that platform: the *flexible PHY*. It has:

* a transmit chain and a receive chain, running at 8 Msps;
* the FCS (CRC) engine;
* the data-plane streams to and from the processor's memory;
* the control registers;
* interrupt generation.

The published description gives what the PHY must do: meet the standard, let
software change the spreading factor, the pulse shaping, the preamble, the SFD
and the length, report PHY parameters, and raise interrupts. It does not give
the internals. The internals here, including the receiver algorithm, the
register map and the widths, are this design's own. The sections below say
where.

Not in the RTL:

* the MAC scheduler and the radio controller, which are software on the ARM;
* the processor, its DMA and the DDR memory;
* the clock source;
* the RF front-end (an FMCOMMS board with its DAC and ADC).

They connect to the top module `wiscop_phy_top` through its ports.

## Block diagram

```
              AXI4-Lite (registers)                      irq
                     |                                    ^
                 axil_regs ---- settings ----+         irq_ctrl <-- events
                     ^                       |                      |
   Tx stream    +----------+   +-----------+ | +---------------+  +-----------+
  (from DMA) -->| axis_fifo|-->| tx_framer |-->| chip_spreader |->| oqpsk_mod |--> dac_i/q
                +----------+   | +crc16_154| | +---------------+  +-----------+
                               +-----------+ |
   Rx stream    +----------+   +-------------------------------+
  (to DMA)   <--| axis_fifo|<--| rx_deframer (+despreader,     |<-------------- adc_i/q
                +----------+   |  crc16_154)                   |
                               +-------------------------------+
```

There is one clock, the 8 MHz sample clock. The DAC gets one sample per
clock, and the ADC delivers one per clock (`adc_valid`).

## The waveform

The PHY sends the standard O-QPSK signal.

* **Symbols.** Each byte becomes two 4-bit symbols, low nibble first.
* **Chips.** Each symbol becomes a 32-chip sequence. Symbols 1–7 are symbol 0
  rotated by 4, 8, …, 28 chips. Symbols 8–15 are symbols 0–7 with every
  odd-numbered chip inverted. `wiscop_pkg::chip_seq` computes them from the
  one constant `0x744AC39B`, which holds symbol 0 with chip c0 in bit 0. No
  table is stored.
* **Branches.** Even chips go to I and odd chips to Q. Each chip is a pulse
  two chip periods long.
* **Timing.** At 2 Mchip/s and 8 Msps one chip lasts 4 samples. The pulse of
  chip *k* covers frame samples 4k … 4k+7 and peaks at sample 4k+4. So Q runs
  one chip (4 samples) behind I.
* **Frame length.** A frame of N chips lasts 4N+4 samples.

### Spreading factor

The spreading factor is set at run time:

| `SF` register | chips per symbol | bit rate | closest other code (chips) |
|---|---|---|---|
| 0 | 32 (standard) | 250 kb/s | 12 |
| 1 | 16 | 500 kb/s | 5 |
| 2 (or 3) | 8 | 1 Mb/s | 1 |

The shortened codes are the first 16 or 8 chips of the standard sequences.
The 16 codes stay distinct at every factor. But at 8 chips one chip error can
turn one symbol into another, so SF 8 only suits a clean link. The published
description says only that the spreading factor is controllable. Which
factors exist, and how they are shortened, is this design's choice.

### Pulse shaping

`CTRL[2]` selects the pulse:

* 0: half-sine, as in the standard;
* 1: rectangular, which gives plain offset-QPSK.

The pulse peak is `AMP` = 1800 on a 12-bit signed scale. The half-sine
samples are AMP·sin(πm/8) for m = 0…7, computed from Q15 constants.

## Transmit chain

1. **`axis_fifo`** (128 bytes) holds the payload written by the DMA.
2. **`tx_framer`** sends, byte by byte:
   * `PREAMBLE` zero bytes (4 by default);
   * the `SFD` byte (0xA7 by default);
   * the PHR, which is the 7-bit `TX_LEN`;
   * `TX_LEN`−2 payload bytes from the FIFO;
   * the two FCS bytes, low byte first.

   `crc16_154` computes the FCS from the payload as it passes. The framer
   latches the settings at the start of a frame, so software can change them
   while a frame is on the air.
3. **`chip_spreader`** turns each symbol into chips. It takes the next symbol
   in the same clock as the last chip of the current one, so the chip stream
   has no gaps.
4. **`oqpsk_mod`** takes a chip every 4 clocks and outputs the I/Q samples. It
   pulses `first_sample` with the first sample and `done` with the last.

The stages are joined by valid/ready handshakes. The framer leaves a one-clock
bubble after each byte. This does not matter, because a symbol is needed only
every 32 clocks or more.

The first sample reaches the DAC a few clocks after the write that sets
`CTRL[0]`. The testbench checks that this takes fewer than 10 clocks.

**Load the whole payload into the FIFO before starting.** If the FIFO runs
empty during a frame, the modulator ends the frame early.

## Receive chain

The receiver is the part with the most design freedom, and the most
limitations.

### Chip decisions and the window

The receiver has two chip detectors. `CTRL[3]` chooses between them.

* **Differential (default, `CTRL[3]` = 0).** Each clock it takes the sign of
  Im(s(t)·conj(s(t−4))), where s is the complex ADC sample. With the half-sine
  pulse, this sign is the XOR of two neighbouring chips. The chip before the
  symbol is not known, so chip 0 of every symbol is not used. A constant
  carrier offset only turns the product by 2π·f·0.5 µs, so the sign stays
  right. This detector is what makes over-the-air links with off-the-shelf
  nodes possible.
* **Coherent (`CTRL[3]` = 1).** It takes the signs of I and Q directly. It
  needs a link with no carrier offset, such as a loopback or a cable with a
  common clock.

The signs are shifted into 128-sample histories. `rx_deframer` builds a chip
window from them, assuming the current sample is the peak of a symbol's last
chip. For an SF-chip symbol, chip *j* comes from 4·(SF−1−j) samples back. In
coherent mode it comes from I when *j* is even and from Q when *j* is odd. In
differential mode all chips come from the product history.

`despreader` compares the window with all 16 codes (shortened to SF chips). In
differential mode it uses the differential codes, c ⊕ (c≪1) ⊕ 0xAAAAAAAA,
and ignores chip 0. It returns the closest symbol and its Hamming distance. It
also returns the distance to symbol 0, which is used to find the preamble.

### Acquisition

* **SEARCH.** Each sample, look for symbol 0 within the chip-error threshold.
  The threshold is `RX_THRESH` (default 4) for 32 chips, halved for SF 16 and
  divided by 8 for SF 8. At SF 8 the differential detector has only 7 usable
  chips. With a one-chip tolerance, noise alone matches symbol 0 about once
  in 16 samples and soon fakes a whole preamble and SFD.
* **RUN.** Each pulse is several samples wide, so the preamble matches on a run
  of 5–8 neighbouring samples. The receiver measures the run and puts its
  symbol clock in the middle. After that the clock free-runs: one decision
  every 4·SF samples.

### Frame decoding

* **PRE.** Symbol 0 means more preamble. Once at least one such symbol has
  been decided here, the low nibble of `SFD` moves on to SFD_HI. So the
  preamble must be at least two symbols (one byte) long. Anything else, or too many chip errors, goes back to SEARCH. So the
  low nibble of a custom SFD must not be 0.
* **SFD_HI.** The high nibble completes the SFD and raises the SFD event.
* **PHR.** Two symbols give the length; bit 7 is ignored. A length of 0 goes
  back to SEARCH.
* **PSDU.** Pairs of symbols become bytes. Each byte goes through
  `crc16_154` and out on the Rx stream.
  * The last byte carries `tlast`, and `tuser` = 1 if the FCS is good.
    Because the FCS bytes are fed through the engine too, a good frame leaves
    its register at zero.
  * `rx_done` and `crc_ok` follow.
  * The distances of all decisions in the frame are summed and reported as
    `RX_CHERR`, a link-quality figure.
  * The mean of |I|+|Q| over the 64 samples after the SFD is reported as
    `RX_RSSI`, in ADC units. For a clean signal of peak A it is about
    4A/π with the half-sine pulse and 2A with the rectangular one.

`rx_done` comes 1–4 clocks after the peak of the frame's last chip.

### Output and overflow

The byte output is a one-deep register feeding a 128-byte FIFO. Bytes arrive
only every 8·SF clocks. A byte is dropped, and counted in `RX_OVF`, only when
the FIFO is full and the register is still occupied. That happens only when
software stops reading the Rx stream.

### Limits

* **No timing tracking.** After the preamble the symbol clock free-runs.
  Timing drift of ±3 samples per frame is tolerated: at 8 Msps a 127-byte
  frame lasts 4.3 ms, so this allows about 80 ppm between the sample clocks.
* **Carrier offset.** The differential detector has been tested with offsets
  up to ±180 kHz at SF 32 (`tb_rx_deframer`) and 120 kHz through the whole
  PHY (`tb_wiscop_phy_top`). Two nodes with ±40 ppm crystals at 2.45 GHz can
  be up to about 196 kHz apart. The coherent detector does not tolerate any
  offset.
* **Hard decisions.** The chips are decided by sign alone. The differential
  detector loses a few dB against an ideal coherent receiver.
* **Rectangular pulses.** The differential product does not give the chip XOR
  with rectangular pulses, so use the coherent detector with `CTRL[2]` = 1.
* **Short spreading factors.** At SF 8 the differential codes have only 7
  usable chips, and the closest codes differ in fewer chips than shown in the
  table above. Preamble and SFD must also be received without chip errors
  at SF 8. Use SF 8 only on a clean link.

The published description does not describe its receiver, so this whole
section is this design's own.

## Control registers (AXI4-Lite, 32-bit words)

| addr | name | bits | reset |
|---|---|---|---|
| 0x00 | CTRL | [0] start Tx (write 1, reads 0), [1] Rx enable, [2] pulse: 0 half-sine / 1 rectangular, [3] Rx detector: 0 differential / 1 coherent | 0x2 |
| 0x04 | SF | [1:0] spreading factor select | 0 |
| 0x08 | PREAMBLE | [3:0] preamble bytes | 4 |
| 0x0C | SFD | [7:0] start-of-frame delimiter (Tx and Rx) | 0xA7 |
| 0x10 | TX_LEN | [6:0] PHR length = payload + 2 | 0 |
| 0x14 | RX_THRESH | [5:0] allowed chip errors per 32 chips | 4 |
| 0x18 | IRQ_EN | [4:0] interrupt enables | 0 |
| 0x1C | IRQ_STAT | [4:0] latched events; write 1 to clear | 0 |
| 0x20 | STATUS | [0] Tx busy, [1] Rx in frame, [2] last FCS good | – |
| 0x24 | RX_LEN | length of the last received frame | – |
| 0x28 | RX_CHERR | chip errors summed over the last frame | – |
| 0x2C | TX_CNT | frames sent | 0 |
| 0x30 | RX_CNT | frames received with a good FCS | 0 |
| 0x34 | CRCERR | frames received with a bad FCS | 0 |
| 0x38 | RX_OVF | received bytes dropped | 0 |
| 0x3C | RX_RSSI | [12:0] signal strength of the last frame, mean \|I\|+\|Q\| | 0 |

Bus behaviour:

* A write is taken when address and data are both valid. The response comes
  on the next clock.
* A read returns data one clock after the address.
* Byte strobes are ignored.
* Unmapped addresses read 0.

`SF`, `SFD` and `RX_THRESH` apply to both directions. Both ends of a link must
be set alike.

The published platform gives each processing unit its own AXI register
interface. Here all the registers sit in one block, which is simpler to map.

### Interrupts

| bit | event |
|---|---|
| 0 | first sample of a frame sent to the DAC |
| 1 | SFD received |
| 2 | last sample of a frame sent |
| 3 | frame received |
| 4 | frame received with a bad FCS |

These are the events a MAC needs for precise timing, such as starting an ACK
turnaround or timestamping a reception. An event sets its `IRQ_STAT` bit. The
`irq` line is high while any enabled bit is set. An event that arrives in the
same clock as its clear is kept.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `wiscop_phy_top` | `TX_FIFO_DEPTH`, `RX_FIFO_DEPTH` | 128 | data-plane FIFO depth in bytes (one maximum PSDU) |
| `wiscop_phy_top`, `oqpsk_mod` | `AMP` | 1800 | pulse peak, 12-bit signed DAC scale |
| `axis_fifo` | `DEPTH`, `W` | 128, 8 | FIFO depth and data width |
| `irq_ctrl` | `N` | 5 | number of events |

From the published description or the standard:

* 8 Msps;
* the chip sequences, the half-sine pulse and the FCS polynomial;
* the 127-byte maximum frame;
* the 0xA7 SFD and the 4-byte preamble.

Everything else is this design's choice: the widths, the FIFO depths, the
amplitude and the register map.

## Simulating

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. `tb_ref_pkg` holds the reference models the
testbenches share:

* the chip table as the standard prints it;
* an MSB-first CRC model;
* the pulse, computed with `$sin`.

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/wiscop_pkg.sv tb/tb_ref_pkg.sv tb/tb_wiscop_phy_top.sv --top-module tb_wiscop_phy_top
./obj_dir/Vtb_wiscop_phy_top
```

To run another testbench, replace `tb_wiscop_phy_top` in both places with its
name.

`tb_wiscop_phy_top` runs the whole PHY at its default parameters. It loops the
DAC back to the ADC through a noisy channel and acts as the processor over
AXI4-Lite. It checks:

* every spreading factor and both pulse shapes;
* both chip detectors, and a frame with a 120 kHz carrier offset;
* a custom preamble and SFD;
* an FCS error, made by conjugating one symbol in the channel;
* a 127-byte frame;
* FIFO overflow with two 127-byte frames and no reader: 129 bytes are kept and
  125 counted as dropped;
* the interrupts;
* the DAC frame length: 4 samples per chip;
* the reported length and signal strength;
* the count of frames sent.

`tb_rx_deframer` makes its waveforms in the testbench, so the receiver is
tested apart from the transmitter. It also checks the time from the last chip
to `rx_done`.

## Relation to the published platform

Each item gives what the platform description says, then what this RTL does.

* **"Fully standard compliant" 2.4 GHz PHY with a CRC engine.** The transmitter
  follows the standard's frame, spreading, O-QPSK and FCS. The receiver is
  this design's own and has limits (see *Limits*).
* **Controllable spreading factor and pulse shaping.** Spreading factor 32, 16
  or 8 and half-sine or rectangular pulses, chosen by this design.
* **Customisable preamble, SFD and length.** Registers `PREAMBLE`, `SFD` and
  `TX_LEN`. The receiver accepts any preamble of one byte or more.
* **Reporting PHY parameters.** Status, last length, chip errors, signal
  strength and counters.
* **Configurable hardware interrupts from the PHY.** `irq_ctrl` with five
  maskable events.
* **HP/DMA data path.** AXI-Stream byte FIFOs. The DMA engine and HP port are
  outside.
* **Medium access scheduler.** This covers the ring buffers in shared memory,
  the timer-driven transmission scheduling, and the 192 µs ACK turnaround with
  1 µs accuracy. Not in RTL: it is software on the processor using its
  hardware timer. The PHY's share of the ACK turnaround is below 2 µs: frame
  end to `rx_done`, plus start write to first DAC sample.
* **"Master Clock" feeding the scheduler timer.** Not in RTL. The PHY runs on
  the 8 MHz sample clock it is given.
