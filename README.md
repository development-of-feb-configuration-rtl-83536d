# FEB configuration test-board firmware

The front-end boards (FEBs) of the ATLAS New Small Wheel carry three kinds of
ASIC that must be configured before the detector runs:

- the VMM3 front end, configured over SPI;
- the TDS2 trigger serializer, configured over I2C;
- the GBT-SCA slow-control chip.

The VMM3 and TDS2 never see the configuration system directly. A GBT-SCA on the
same board takes HDLC packets over a 80 Mb/s E-link and turns them into SPI,
I2C and GPIO transactions.

The test board puts an FPGA where the detector's readout chain would normally
be. The FPGA takes commands from a host computer and wraps them into HDLC
frames for the SCA's E-link. It collects the SCA's replies for the host. It
also plays the part of the SCA's targets: an I2C target that looks like a
TDS2, a SPI target that looks like the VMM3 configuration port, and a GPIO
port. Whatever the SCA writes on its I2C, SPI and GPIO pins is captured inside
the FPGA. The host can then read it back and compare it with what it sent.
That loopback is the whole point of the design: one board and one PC check
the complete configuration path, host → FPGA → E-link → SCA → SPI/I2C/GPIO →
FPGA → host.

This repository holds synthesizable SystemVerilog for that FPGA firmware and
a self-checking testbench for every block. The Ethernet MAC, the PLL, the
GTX transceivers and the ASICs themselves are not included. The top module
takes the two clocks and a host byte stream as ports.

## Data path

```
 host byte stream            40 MHz system clock
 (125 MHz net clk)
  h_rx_* ─► async_fifo ─► cmd_decoder ─► data_control ─► hdlc_tx ─┐
  h_tx_* ◄─ async_fifo ◄─      │  ▲        │  ▲  │                 ▼
                               └──┘ host   │  │  │ rx frames   comm_ctrl ─► eport (master) ◄─► E-link 0
                                   byte    │  │  └─◄ hdlc_rx ◄──      └──► eport (AUX)    ◄─► E-link 1
                                   bus     │  │
                     16 × i2c_slave ◄──────┘  ├──── spi_slave  ◄── SCA SPI (ENA, SCK, SDI, CS[8])
                     (SCA I2C 0..15)          └──── gpio_ctrl  ◄─► SCA GPIO[32]
```

| Block | File | Role |
|---|---|---|
| Command decoder | `rtl/cmd_decoder.sv` | parses host commands, accesses Data control, sends one reply per command |
| Data control | `rtl/data_control.sv` | send and receive packet buffers, I2C/SPI/GPIO regions, configuration registers |
| SCA packet generator | `rtl/hdlc_tx.sv`, `rtl/hdlc_rx.sv` | HDLC framing, bit stuffing, FCS-16, in both directions |
| Communication control | `rtl/comm_ctrl.sv` | picks the master or the AUX E-port |
| E-port | `rtl/eport.sv` | 40 MHz DDR lane pair, 2 bits per clock each way |
| I2C slave | `rtl/i2c_slave.sv` | TDS2-style I2C target, one per SCA I2C channel |
| SPI slave | `rtl/spi_slave.sv` | VMM3-style SPI target with 8 chip selects |
| Parallel I/O control | `rtl/gpio_ctrl.sv` | 32 GPIO lines: sampling, change mask, outputs |
| Top | `rtl/feb_cfg_top.sv` | wires everything, crosses the host streams into the system clock |
| Helpers | `rtl/sync_fifo.sv`, `rtl/async_fifo.sv`, `rtl/feb_cfg_pkg.sv` | FIFOs, shared constants, opcodes, FCS function |

## Clocks and reset

There are two clocks:

- `clk_net` is the 125 MHz network clock. Only the host-facing sides of the
  two dual-clock FIFOs use it.
- `clk_sys` is the 40 MHz system clock. Everything else runs on it, and the
  E-link bit clock is this same clock used at both edges.

On the board both clocks come from a PLL fed by a 200 MHz oscillator. Here
they are top-level inputs and are treated as unrelated. The host streams
cross between them through 16-entry Gray-pointer FIFOs.

`rst_n` is one active-low asynchronous reset for both domains. It must be
released while both clocks run. Every register that is read is reset.

## The E-link and HDLC

**Line format.** The E-link carries 80 Mb/s as two bits per 40 MHz clock. In
each `tx_bits`/`rx_bits` pair, bit 0 is the one that goes out or arrives
first.

**E-port.** `eport` is the DDR boundary.

- Transmit: a rising-edge flop holds bit 0 and a falling-edge flop holds
  bit 1. The output selects between them with the clock, which is how an
  FPGA's output DDR register behaves. That select is the one place where a
  clock is used as data. The tools report it, and it is intended.
- Receive: the line is sampled at both edges, and the pair is handed to the
  system clock one cycle later.

**Framing.** Frames follow ISO HDLC:

- opening flag `0x7E`;
- the frame bytes, least significant bit first;
- a zero inserted after every five consecutive ones;
- the 16-bit FCS: CRC-CCITT in its reflected form (polynomial `0x8408`),
  preset to `0xFFFF` and sent complemented;
- closing flag.

Between frames the transmitter sends back-to-back flags.

The bytes inside a frame are the GBT-SCA's own frame: address, control and
information field. The host builds these. The firmware adds only the flags,
the stuffing and the FCS. The GBT-SCA link-layer commands, such as connect
and reset, are therefore ordinary frames from the firmware's point of view.

**Transmitter.** `hdlc_tx` handles both line bits of a clock in one pass
through its state update. It keeps one byte of look-ahead, so it knows which
byte is the last before the FCS is due. A byte takes 4 clocks, or 4.5 to 5
with stuffing. A 16-byte frame of zeros plus flags and FCS takes about 80
clocks, or 2 µs.

The transmitter must never run dry inside a frame, because that would corrupt
the FCS. Data control therefore releases a frame only after its last byte has
been stored. If a source still stops early, `underrun` pulses and the frame is
cut short. The receiver then sees a bad FCS.

**Receiver.** `hdlc_rx` runs the incoming bits through an 8-bit window. Each
bit carries a tag saying whether it is data or a stuffed zero. A flag in the
window clears the tags, so the flag's own bits never reach the byte
assembler. The FCS is computed over every byte, and the last two bytes are
held back, so the FCS never reaches the output. When the closing flag
arrives:

- the residue is compared with `0xF0B8`, and the result is `m_ok`, valid
  with `m_last`;
- a frame with a partial byte counts as bad;
- frames shorter than one data byte plus the FCS are dropped.

Seven ones in a row abort the frame. If no bytes had been delivered yet,
nothing is shown. Otherwise the frame is closed at once with `m_ok = 0`.

**Port choice.** `comm_ctrl` selects which E-port is live. The SCA has a
master and a standby E-link port, and only one is used at a time. A change of
configuration register 0 bit 0 takes effect only while the transmitter is
between frames. A frame is therefore never split across ports. The idle port
sends all ones, and receive bits are taken only from the live port.

## Host command format

The host side is a byte stream in each direction, with valid/ready and at
most one byte per clock. Every command has the form

```
opcode, channel, length N, N payload bytes
```

Each command gets exactly one reply in the same form. The reply's opcode is
`opcode | 0x80`.

| Opcode | Command | Request | Reply |
|---|---|---|---|
| 0x01 | SCA_SEND | payload = one SCA frame | chan, no data; waits while the send buffer is full |
| 0x02 | SCA_RECV | – | chan = 1 FCS good / 0 bad / 0xFF none; data = frame bytes |
| 0x03 | I2C_READ | chan = I2C channel 0..15, payload[0] = register 0..15 | 16 register bytes |
| 0x04 | SPI_READ | chan = chip select 0..7, payload[0] = word 0..17 | 12 bytes, bits 95..88 first |
| 0x05 | GPIO_WRITE | payload[0..3] outputs, [4..7] output enables, LSB byte first | no data |
| 0x06 | GPIO_READ | – | 16 bytes: inputs, outputs, enables, change mask |
| 0x07 | CFG_WRITE | chan = register, payload[0] = value | no data |
| 0x08 | CFG_READ | chan = register | 1 byte |
| other | – | – | opcode 0xFF, chan = the unknown opcode |

A GPIO_READ clears the change mask. Extra payload bytes are consumed and
ignored.

Configuration registers:

| Reg | Meaning |
|---|---|
| 0 | control; bit 0 selects the AUX E-port |
| 1 | status {bit 2 receive overflow, bit 1 transmit underrun, bit 0 AUX active}; any write clears the two flags |
| 2 | frames received |
| 3 | frames received with bad FCS |

## Buffers and memories (Data control)

**Send buffer.** 256 bytes, each stored with an end-of-frame bit. A counter of
complete frames gates the transmitter.

**Receive buffer.** 256 bytes, plus a 16-entry FIFO of {FCS ok, length}
records, one per frame.

- When a frame starts, the receiver must have room for a record and at least
  one byte. Otherwise the frame is dropped whole.
- If the byte buffer fills in mid-frame, the rest of the frame is discarded
  and the frame is marked bad.
- Either case sets the overflow flag.

**I2C data.** 16 regions of 256 bytes, one per SCA I2C channel. The I2C
target of a channel addresses its region as {register[3:0], byte[3:0]}. That
is 16 registers of up to 16 bytes, enough for the TDS2's 16 registers of 2 to
16 bytes (1296 bits in total), since one SCA I2C transfer carries at most 16
bytes.

**SPI data.** 8 chip selects × 18 words × 96 bits. This holds a full 1728-bit
VMM3 image for each of the 8 chips that a GBT-SCA SPI master can select.

## Loopback targets

**SPI slave (`spi_slave`).** It uses the four VMM3 configuration signals:

- ENA and CS are active low.
- SDI is shifted on the falling edge of SCK, first bit into bit 95.
- The 96-bit word is latched when its CS goes high.

Each chip select has a word counter, so its 18 transfers land in slots 0 to
17. ENA going high ends the configuration, resets the counters and pulses
`cfg_done`. In the real system ENA is driven by an SCA GPIO line, so the
board must wire that GPIO to `spi_ena`.

The pins are sampled by the system clock through two-flop synchronisers.
SCK must therefore stay below about 5 MHz, 8 system clocks per period. The
GBT-SCA's SPI clock settings include rates in this range.

**I2C slave (`i2c_slave`).** It has the TDS2's 7-bit address: a 3-bit device
number, parameter `DEV_ID` (default 0), and a 4-bit register number. It
supports START, repeated START, STOP, write bursts and read bursts. The byte
index restarts at 0 with each address. A write burst stores consecutive bytes
of the addressed register. The byte index wraps at 16.

SDA is pulled low through `sda_oe`. SCL and SDA are oversampled with two-flop
synchronisers, which is ample for 100 kHz to 1 MHz buses.

**Parallel I/O (`gpio_ctrl`).**

- Inputs: synchronised, with a sticky change mask.
- Outputs and output enables: registers written by the host.

The host can watch the SCA toggle its GPIO lines, for example ENA, and can
drive lines towards the SCA for the SCA's GPIO input test.

## Where this design follows the source description and where it does not

Taken from the published description of the board:

- the list of firmware blocks and their names: network interface and command
  decoder, clock module, data control with the regions listed above, SCA
  packet generator, communication control with master and AUX E-ports, I2C
  slave, SPI slave, parallel I/O;
- the 200 MHz → 125 MHz / 40 MHz clocking;
- E-link at 40 MHz DDR, 80 Mb/s, with HDLC framing;
- the SCA's 16 I2C, 8 SPI and 32 GPIO lines;
- the VMM3 SPI protocol: ENA/CS active low, shift on the falling SCK edge,
  latch on CS high, 18 × 96 = 1728 bits;
- 8 VMM3s on one bus;
- the TDS2 I2C addressing (3 + 4 bits);
- TDS2 registers of at most 16 bytes;
- 128 bits per SCA I2C transfer.

This design's own choices:

- **The host command format and all opcodes.** The description says only
  that the host builds the SCA instructions.
- **HDLC details.** Bit order, FCS, idle flags and abort are standard ISO
  HDLC, which is what the GBT-SCA uses, but they are not spelt out in the
  description.
- **Buffer behaviour.** Buffer depths, drop-on-overflow, the memory layouts
  and the register map are this design's own.
- **Port switching.** The switch timing and the idle level of the standby
  E-port are this design's own.
- **Shared blocks.** One `comm_ctrl` serves both directions. The block
  diagram draws two communication-control boxes and shows e-port Master on
  the send side and e-port AUX on the receive side. This design follows the
  text instead: each E-port is a full lane pair and one is selected.
- **Sixteen I2C targets.** The block diagram draws one I2C-slave box beside
  sixteen I2C data regions. The design uses one target per SCA I2C channel.
- **SPI and GPIO wiring.** In the block diagram the SPI-slave box sits next
  to the GPIO region and the parallel-I/O box next to the SPI region. The
  design connects by function: the SPI target writes the SPI data.

Not included:

- the Ethernet MAC/IP layer;
- the PLL;
- the GTX receiver that checks the TDS2's 4.8 Gb/s output;
- any handling of the VMM3's DT0/DT1 readout.

The description gives no format for any of these. The top module brings the
host stream and both clocks out as ports.

## Testbenches

Every block has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=<n> failures=<n>` and stops itself through a watchdog if
the design hangs. `tb/hdlc_model_pkg.sv` is an independent bit-serial HDLC
encoder and decoder, written with queues, that the testbenches use as the
reference.

| Testbench | What it checks |
|---|---|
| `tb_hdlc_tx` | frames against the reference decoder, including all-ones data (stuffing), back-to-back frames, idle flags, the bit rate |
| `tb_hdlc_rx` | reference-encoded frames, bad FCS, abort, short frames, flags shared between frames |
| `tb_eport` | line levels in both clock phases, loopback through a delayed wire |
| `tb_comm_ctrl` | switching only between frames, idle ones on the standby port, receive selection |
| `tb_i2c_slave` | bit-banged I2C writes, reads, repeated start, wrong device number (NACK) |
| `tb_spi_slave` | 8 chips × 18 words × 96 random bits, ENA reset of the word counters |
| `tb_gpio_ctrl` | sampling, sticky change mask, output registers |
| `tb_data_control` | send framing, receive status and overflow (small buffers), I2C/SPI regions, registers |
| `tb_cmd_decoder` | every opcode with random gaps and back-pressure against a modelled byte bus |
| `tb_feb_cfg_top` | whole design at its default sizes, with a behavioural SCA at the E-link |

The end-to-end test `tb_feb_cfg_top` models the GBT-SCA:

- It decodes the firmware's HDLC on the live E-link.
- It acts on each frame by bit-banging SPI, I2C or GPIO towards the
  firmware's targets.
- It answers with its own HDLC frames.

The test runs a full VMM3 configuration of 8 chips × 18 words and reads back
all 13,824 bits over SPI_READ. It runs a TDS2 configuration of 16 registers,
1296 bits in all, and reads it back over I2C_READ. It also:

- sends a frame with a bad FCS;
- sends an aborted frame;
- switches to the AUX E-port and back;
- fills the send buffer, so SCA_SEND stalls;
- overflows the receive buffer;
- applies back-pressure on the reply stream.

It counts each of these events and fails if any one never happened.

To run a testbench with plain Verilator (5.x):

```
verilator --binary --timing --timescale 1ns/1ps -Wno-fatal -y rtl -y tb \
    rtl/feb_cfg_pkg.sv tb/hdlc_model_pkg.sv tb/tb_feb_cfg_top.sv \
    --top-module tb_feb_cfg_top
./obj_dir/Vtb_feb_cfg_top +verilator+rand+reset+2
```

Replace `tb_feb_cfg_top` with any other testbench name. `tb/hdlc_model_pkg.sv`
is needed only by the HDLC, data-control, decoder and top testbenches, but
listing it does no harm. The testbenches use delays in nanoseconds with fractions (the 125 MHz clock has a 4 ns half period, others are offset by fractions of a nanosecond), so `--timescale 1ns/1ps` is required. `+verilator+rand+reset+2` starts unreset state at
random values, which checks that nothing depends on power-up contents. The
full end-to-end run takes a few seconds.

## Changing it

- **Sizes.** `spi_slave` takes `N_SS`, `WORD_BITS` and `N_WORDS`.
  `data_control` takes `TX_AW`, `RX_AW` and `RI_AW`, the log2 of the send
  buffer, the receive buffer and the frame-record depth. The shared constants
  (16 I2C channels, 8 chip selects, 96-bit words, 18 words) are in
  `rtl/feb_cfg_pkg.sv`.
- **TDS2 device number.** It is the `I2C_DEV_ID` parameter of the top.
- **Adding a command.** Add an opcode to `opcode_e` and a branch in the
  `S_SETUP` state of `cmd_decoder`. If the command needs new storage, add a
  space to `space_e` and decode it in `data_control`.
