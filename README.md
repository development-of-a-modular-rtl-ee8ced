# CaRIBOu central-interface firmware

CaRIBOu (Control and Readout ITk BOard) is a modular bench and testbeam
system for HV-CMOS pixel sensors, developed for the ATLAS Inner Tracker
upgrade R&D. A host PC talks to a Xilinx ZC706 board, the "central
interface board". That board sits on the CaR board, a carrier with power
rails, bias voltages, pulse generators and an 8-channel ADC. The CaR board in
turn carries the chip boards: a sensor (here AMS180v4) glued onto an FE-I4B
pixel readout chip. The FPGA of the central interface board is the only
piece of the chain that has to understand every device. It does the
following:

- It takes commands from the host over one of two links: Gigabit Ethernet,
  through the ZYNQ's ARM processor, or the GBT optical link, through a FELIX
  PCIe card.
- It turns those commands into I2C transactions for the CaR board's power,
  bias and ADC setup, into shift-register loads for the sensor, and into
  serial commands for the FE-I4B.
- It receives two data streams: the FE-I4B's 160 Mbit/s 8b/10b hit stream
  and the CaR board's serial ADC.
- It buffers and merges the two streams and sends them to the host over the
  selected link. On the Ethernet link the data go into DDR3, from which the
  processor's LwIP stack sends them. On the optical link they are packed
  into 120-bit GBT frames.

This repository is a synthesizable SystemVerilog model of that firmware,
with one self-checking testbench per block and two whole-system tests. The
block structure and the headline numbers follow the published system
description. These are:

- the five front-end modules and their LVDS line counts;
- the command decoder and the data buffer;
- AXI4-Lite and AXI-HP towards the processor;
- the 120-bit GBT frame;
- 160 Mbit/s 8b/10b for the FE-I4B;
- a 40 MHz, 12-bit, 8-channel ADC.

Everything the description leaves open is this design's own choice. This
includes all encodings, the register map, the handshakes, the buffer sizes
and the DDR3 buffer protocol. The choices are listed in
[What is original and what is chosen](#what-is-original-and-what-is-chosen).

## Block structure

```
                 LVDS                                   to processing system / GBT-FPGA core
  I2C  (x2) <--- i2c_master    <--+
  sensor(x4)<--- sensor_config <--+-- cmd_decode <-- axil_slave  <-- AXI4-Lite (Ethernet commands)
  FE-I4B(x2)<--- fei4_config   <--+        ^    <-- gbt_ipbus   <-- GBT rx frames (optical commands)
                                  |        | status/counters        |
  ADC (x10) ---> adc_interface ---+--> data_buffer --+--> axi_hp_writer --> AXI-HP --> DDR3 ring
  FE-I4B(x1)---> fei4_rx ---------+                  +--> gbt_packer ----> GBT tx frames
                                                                  ^ read responses from gbt_ipbus
```

`caribou_top` wires these blocks together. Several parts are outside the
FPGA fabric or are vendor IP: the processing system with its DDR3
controller and Ethernet MAC, the GBT-FPGA transceiver core, and the LVDS
I/O buffers. Their signals are the top's ports:

- `s_axil_*`: the AXI4-Lite slave;
- `m_axi_*`: the AXI-HP write master;
- `gbt_*`: the user side of the GBT-FPGA core;
- `i2c_*`, `sens_*`, `fei4_cmd_*`, `adc_*` and `fei4_dout`: the front-end
  lines.

## Clocks and reset

There is one system clock `clk` of 160 MHz. The FE-I4B data line is sampled
once per cycle, so one cycle is one line bit. The FE-I4B command clock is
`clk/4` = 40 MHz. The ADC's bit clock `adc_dco` is a second clock domain. It
meets the system domain only inside `adc_interface`, through a Gray-pointer
asynchronous FIFO, plus two synchronized single-bit signals: the enable,
and a drop toggle.

Reset `rst_n` is asynchronous and active low. It clears every state machine,
counter and FIFO pointer. FIFO storage is not reset and is never read before
it has been written.

## Commands: two masters, one register bus

The host controls everything through 32-bit registers. Both command paths
deliver a `reg_req_t` (valid, write enable, 8-bit index, write data) to
`cmd_decode`, which returns a `reg_rsp_t` (ack, read data).

- **Ethernet**: `axil_slave` turns AXI4-Lite transfers into requests. The
  register index is byte address bits [9:2]. Byte strobes are ignored.
- **GBT**: `gbt_ipbus` turns received frames into requests. The frame
  layout is given under [GBT frames](#gbt-frames).

The acknowledge is combinational. A master holds its request until it sees
`ack`. If both masters request in the same cycle, AXI4-Lite goes first.

Some writes go to blocks that take time, namely the I2C controller, the
sensor shift register and the FE-I4B command serializer. Such a write is not
acknowledged until that block accepts the word. A busy block therefore
stalls the host access instead of losing the command, and the host can
write words back to back without polling.

| index | name        | access | meaning |
|-------|-------------|--------|---------|
| 0x00  | ID          | RO | `0xCA1B0001` |
| 0x01  | CTRL        | RW | [0] ADC capture enable, [1] FE-I4B receiver enable, [2] link select (0 Ethernet/DDR3, 1 GBT) |
| 0x02  | STATUS      | RO | [1] I2C busy, [2] sensor busy, [3] FE-I4B command busy, [4] FE-I4B receiver locked |
| 0x03  | I2C_CMD     | WO | [12] START, [11] STOP, [10] read, [9] write, [8] NACK after read, [7:0] byte |
| 0x04  | I2C_RX      | RO | [9] busy, [8] slave NACK seen, [7:0] byte read |
| 0x05  | SENS_BITS   | RW | bits per sensor word, 1..32 (0 = 32) |
| 0x06  | SENS_DATA   | WO | sensor word, shifted out MSB first |
| 0x07  | SENS_LOAD   | WO | any write: load strobe to the sensor latches |
| 0x08  | FEI4_BITS   | RW | bits per FE-I4B command word, 1..32 (0 = 32) |
| 0x09  | FEI4_DATA   | WO | FE-I4B command bits, sent MSB first |
| 0x0A  | ADC_FRAMES  | RO | ADC frames delivered |
| 0x0B  | FEI4_RECS   | RO | FE-I4B records received |
| 0x0C  | FEI4_ERRS   | RO | FE-I4B 8b/10b code errors |
| 0x0D  | DROPS       | RO | [31:16] FE-I4B words dropped, [15:0] ADC frames dropped |
| 0x10  | DDR_BASE    | RW | ring base address (bytes) |
| 0x11  | DDR_SIZE    | RW | ring size (bytes, multiple of 4; reset 64 KiB) |
| 0x12  | DDR_WCOUNT  | RO | bytes written and acknowledged since reset |
| 0x13  | DDR_RCOUNT  | RW | bytes the software has consumed |
| 0x14  | GBT_FRAMES  | RO | GBT data frames sent |
| 0x15  | GBT_LOST    | RO | GBT commands that arrived while one was pending |

Unmapped indices read `0xDEADBEEF`. Writes to them are acknowledged and
ignored.

## Front-end control

**I2C** (`i2c_master`) is a byte engine. Each I2C_CMD write performs an
optional (repeated) START, then one byte written or read, then an optional
STOP. A full transaction is a sequence of commands. This one controller
reaches the INA226 current monitors, the power-rail and bias-voltage DACs,
and also the ADC, through an I2C-to-SPI bridge on the CaR board. One bit
takes four phases of `DIV` = 400 cycles, which gives 100 kHz SCL. The lines
are open drain, and clock stretching by a slave is honoured. To run a
transaction, write I2C_CMD, then poll I2C_RX[9] until it drops. The status
word then holds the read byte and the acknowledge seen.

**Sensor configuration** (`sensor_config`) drives four lines: serial data,
two non-overlapping shift clocks and a load strobe. This is the usual
interface of an HV-CMOS configuration shift register. Each bit takes four
phases of 16 cycles (data set, clock 1, clock 2, gap), so the shift rate is
2.5 Mbit/s. SENS_LOAD holds the load line high for two phases. The
register length is not fixed: software writes as many words as the chip
needs. One example is the 4-bit TDAC of every AMS180v4 pixel, used by the
threshold tuning.

**FE-I4B commands** (`fei4_config`) provide a 40 MHz command clock and a
data line. The data line changes on the clock's falling edge, so the chip
sees it stable at the rising edge. Command words are sent back to back
with no gap, and the line is low between them, which FE-I4B reads as no
command. Software builds the commands in FE-I4B's own format. For example,
LV1 is `11101` and CAL is `101100100`.

## FE-I4B data: finding the symbols

This is the most delicate block. FE-I4B sends 8b/10b symbols at 160 Mbit/s.
Its frames are:

- K28.7: start of frame;
- then 24-bit records, three data bytes each, most significant byte first;
- K28.5: end of frame;
- K28.1: fill between frames.

`fei4_rx` shifts in one bit per clock and must find out by itself where
the 10-bit symbols start.

- **Hunting.** Every bit position is examined for the comma pattern
  `0011111` / `1100000`. Only K28.1, K28.5 and K28.7 contain it.
- **Checking.** A comma proposes a boundary. The receiver declares lock only
  when three commas land on that same boundary. A comma on a different
  boundary restarts the count there. The idle stream supplies commas
  continuously, so lock takes three idle symbols. A single comma-like
  pattern in line noise cannot hold the receiver on the wrong boundary.
- **Locked.** The boundary is frozen. Once locked, the receiver stops
  looking for commas. This matters because a K28.7 followed by certain data
  bytes forms a false comma that straddles two symbols. Any symbol that is
  not a valid code, or whose disparity is wrong, does the following: it
  drops the lock, increments FEI4_ERRS and aborts the current frame. The
  receiver then hunts again.

Decoding is done by `dec_8b10b`, a table decoder. The receiver tracks the
running disparity next to it. An unbalanced 6-bit or 4-bit sub-block must
have the opposite sign of the current running disparity. The balanced
sub-blocks 111000/000111 and 1100/0011 are each allowed at only one
disparity. Before lock, the running disparity is taken from each comma
symbol, whose first six bits show the disparity in front of it. Inside a
frame:

- every third data byte completes a record, which leaves as
  `{4'hF, 4'h0, record[23:0]}`;
- a record cut short by an abort or an unexpected K symbol is discarded.

Records leave at most once every 30 cycles, and the receiver cannot be held
off. The tests check that the rate is exactly one record per 30 cycles in a
dense frame.

Bit-phase recovery of the incoming line is not modelled. The FPGA's input
delay or oversampling logic would do it in front of this block.

## ADC data: clock crossing and the rate problem

The CaR board's ADC sends each of its 8 channels on its own serial lane,
together with a frame clock (FCO) and a bit clock (DCO). That makes the ten
LVDS inputs of the block. `adc_interface` works in two domains:

- **DCO domain.** The lanes shift in MSB first. The frame starts at the
  rising edge of FCO. After 12 bits, all eight samples and an 8-bit frame
  number go into an async FIFO as one 104-bit entry.
- **System domain.** Each entry is unpacked into eight words
  `{4'hA, channel[3:0], frame[7:0], 4'h0, sample[11:0]}`, channel 0 first.

The model takes one bit per DCO cycle. A real 480 Mbit/s lane would use the
FPGA's DDR/SERDES input primitives, which would feed the same logic several
bits at a time.

The full ADC output cannot be read out continuously. Eight channels at
40 MS/s make 320 M words/s, which is twice what the 160 MHz datapath moves
and far beyond either link. So the ADC is used in capture windows: software
sets CTRL[0] for a while and then clears it. When the buffers fill, whole
frames are dropped and counted in DROPS[15:0]. A frame is never split, so
every delivered frame carries all eight channels.

## Merging and the two uplinks

`data_buffer` holds two FIFOs of 1024 words, one per source, and merges
them round-robin. When both have data, the source not served last goes
next. The two sources are treated differently when the buffer is full:

- The ADC side is back-pressured. Its own front FIFO then drops frames.
- The FE-I4B side cannot wait, so a word arriving at a full FIFO is dropped
  and counted in DROPS[31:16].

Each word's top nibble identifies its source: `A` for ADC, `F` for FE-I4B.

CTRL[2] steers the merged stream to exactly one uplink. The other uplink
sees no valid data.

### Ethernet: the DDR3 ring

`axi_hp_writer` and the processor software share a ring buffer in DDR3,
defined by DDR_BASE and DDR_SIZE. Two free-running byte counters describe
its state:

- DDR_WCOUNT is written by the firmware. It counts bytes whose burst has
  been acknowledged on the B channel.
- DDR_RCOUNT is written by the software. It counts bytes it has sent on and
  no longer needs.

The byte with counter value *n* is at `BASE + (n mod SIZE)`. The firmware
never lets `WCOUNT - RCOUNT` exceed SIZE. If the software falls behind, data
wait in the FIFOs, and are eventually dropped as described above. They are
never overwritten in memory. Software should change BASE or SIZE only while
the ring is empty and no data are flowing.

Words are collected in a 32-entry staging FIFO. A burst starts when 16
words are waiting, or when the oldest word has waited 256 cycles (1.6 us).
Its length is the smallest of these:

- the words waiting;
- 16, the longest burst of the AXI3-based HP ports;
- the room left before the next 4 KiB boundary;
- the room left before the end of the ring;
- the free space in the ring.

One burst is in flight at a time. Assertions check that AW stays stable
while it waits, that no burst crosses 4 KiB, and that responses are OKAY.

### GBT frames

The GBT-FPGA core sends one 120-bit frame per 25 ns: header (4 bits),
slow-control bits (4), user data (80) and forward error correction (32). It
adds the header and the FEC itself. The firmware exchanges the 84 bits in
between, plus the "is data" flag. `gbt_tx_strobe` is a one-cycle pulse per
frame, and `gbt_packer` loads the next frame on it. Layout of bits [79:0]
(bits [83:80] are zero):

| frame         | [79:76] | [75:72]        | [71:64]          | [63:32]    | [31:0]      |
|---------------|---------|----------------|------------------|------------|-------------|
| data (up)     | 1       | word count 1-2 | sequence number  | first word | second word |
| read response (up) | 2  | 0              | register index   | 0          | read data   |
| write (down)  | 3       | -              | register index   | -          | write data  |
| read (down)   | 4       | -              | register index   | -          | -           |
| idle          | 0, with the data flag low | | | | |

A pending read response goes before data. Two words per frame is 2.56
Gbit/s of payload. That is 20 times what the FE-I4B can deliver.

`gbt_ipbus` accepts one command at a time. A command that arrives while the
previous one is still waiting for the register bus is dropped and counted in
GBT_LOST. At 40 MHz frames and a combinational acknowledge this happens only
if a command is held off by a busy block. An example is an I2C write while
a transfer is running. Host software should read back or poll before
sending the next such command.

## What is original and what is chosen

Taken from the system description:

- the set of blocks and how they connect;
- the LVDS line counts of the front-end modules (I2C 2, sensor 4, FE-I4B
  configuration 2, ADC 10, FE-I4B data 1);
- the AXI4-Lite command path and the AXI-HP/DDR3 data path for Ethernet;
- the 120-bit GBT frame;
- the FE-I4B data rate and code, and the processing steps of its receiver
  (de-serialize, align, 10b/8b decode, extract);
- the ADC's rate, resolution and channel count;
- the I2C uses (power rails, monitors, bias, ADC through an I2C-SPI bridge).

Taken from the FE-I4B and GBT specifications rather than the system
description:

- the K28.7/K28.5/K28.1 framing and the 24-bit records;
- the 40 MHz command clock;
- the CAL/LV1 bit patterns used in the tests;
- the header/slow-control/user/FEC split of the GBT frame;
- the 16-beat burst limit of the HP ports.

This design's own choices:

- the register map and the word tags;
- the GBT user-field layout and the GBT command protocol;
- the DDR3 ring protocol;
- the meaning of the four sensor lines and the two-phase clocking;
- the serial-lane reading of the ten ADC lines;
- the I2C byte-command interface;
- the round-robin merge and the drop policy;
- the three-comma lock rule;
- the FIFO depths (1024 words per source, 32-word staging);
- the flush timeout;
- AXI4-Lite priority over GBT.

Not part of this RTL:

- the ZYNQ processing system with its LwIP software;
- the DDR3 memory and controller;
- the Ethernet PHY;
- the GBT-FPGA transceiver core and the SFP;
- the FELIX card and the host software;
- the boards themselves and their analog parts (power supplies, bias DACs,
  pulse generators, ADC).

The CaR board's two calibration pulse generators are controlled, like its
other resources, through the I2C controller here. The description does not
say whether the FPGA times the injection pulses, so no pulse timing logic is
included.

## Verification

Each block has a testbench `tb/tb_<module>.sv` that drives it against an
independent model and prints `TB_RESULT checks=N failures=M`. Each
testbench has a watchdog.

| testbench | what it establishes |
|-----------|---------------------|
| `tb_i2c_master` | START/STOP/repeated START, writes and reads with ACK/NACK, an absent slave, clock stretching, bit timing, against an I2C slave model |
| `tb_sensor_config` | bit order, 1..32-bit words, clock non-overlap, load strobe |
| `tb_fei4_config` | command clock period and duty, back-to-back words, idle low |
| `tb_adc_interface` | 8 lanes deserialized across the clock crossing, channel order, frame numbers, dropped frames when the output stalls |
| `tb_fei4_rx` | lock after line noise at a random bit phase, record extraction, invalid codes and disparity errors with frame abort and relock, one-cycle latency, decoding of every data byte |
| `tb_data_buffer` | fairness of the merge, ordering per source, FE-I4B drop counting |
| `tb_axil_slave` | AXI4-Lite writes and reads with random valid/ready timing |
| `tb_cmd_decode` | every register, stalls on busy targets, master priority |
| `tb_axi_hp_writer` | addresses against the ring formula, 4 KiB splits, WLAST, flush, ring-full stop and resume |
| `tb_gbt_packer` | data and response frame layouts, one or two words, sequence numbers |
| `tb_gbt_ipbus` | write and read commands from frames, response, lost commands |
| `tb_caribou_top` | the whole firmware at default parameters (see below) |
| `tb_fei4_scan` | an FE-I4B tuning-style loop on the whole firmware (see below) |
| `tb_sensor_tdac` | sensor TDAC tuning iterations on the whole firmware, over GBT (see below) |

`tb_caribou_top` runs the complete firmware with every parameter at its
default. It uses models of:

- the processor (AXI4-Lite master and an AXI-HP DDR3 memory with random
  ready timing);
- the GBT core;
- an I2C slave;
- the sensor shift register;
- the FE-I4B (command decoder, and an 8b/10b data encoder with running
  disparity);
- a serial ADC.

The test runs through these steps:

1. Identify the firmware.
2. Configure a monitor over I2C and read it back.
3. Load the sensor register and send an FE-I4B command.
4. Take ADC and FE-I4B data into DDR3, including a short tail that only the
   flush timer sends.
5. Switch to the GBT link by a command sent over GBT.
6. Take data in GBT frames and read a counter back over GBT.
7. Corrupt the FE-I4B stream to force an error and relock.
8. Shrink the ring until the writer stops and ADC frames are dropped.

The test counts each of these mechanisms and fails if any of them never
happened.

`tb_fei4_scan` repeats the data-taking step of FE-I4B tuning at default
parameters. The step is a CAL command, an LV1 trigger, and a frame of hit
records sent back to back with no idle symbols. The test runs 16 injections
of 64 hits, half over Ethernet and half over GBT. It checks that every
record arrives in order, that no record is lost, and that the receiver runs
at exactly the line rate.

`tb_sensor_tdac` is the sensor side of threshold tuning, at default
parameters. Each of three iterations writes a new 4-bit TDAC value for each
of 64 pixels into the sensor register, then pulses the load line. Every
command goes through GBT downlink frames, and the host model polls STATUS
over GBT before each word. The test checks the latched pattern, the shift
timing, and that no GBT command was lost. This polling is also the
recommended way to drive the GBT command path.

Each test runs in seconds.

## Simulating

The code is plain SystemVerilog-2017. It has been used with Verilator 5 and
the slang front end of Yosys. The package must come first; the other
modules are found through `-y`. From the repository root:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
    rtl/caribou_pkg.sv tb/tb_caribou_top.sv --top-module tb_caribou_top -Mdir obj
./obj/Vtb_caribou_top
```

Replace `tb_caribou_top` by any other testbench name. The testbenches use
`#` delays with fractional nanoseconds, so `--timescale 1ns/1ps` is needed.
Verilator is a two-state simulator that starts undriven state at random
values. Every testbench model therefore waits for reset before it looks at
the design.

To change sizes, override the parameters of `caribou_top`:

| parameter | default | meaning |
|-----------|---------|---------|
| `I2C_DIV` | 400 | SCL = clk/(4*DIV) |
| `SENS_DIV` | 16 | sensor phase length |
| `FEI4_DIV` | 4 | command clock divider |
| `ADC_LANES` | 8 | ADC lanes (channels) |
| `ADC_BITS` | 12 | ADC bits |
| `BUF_DEPTH` | 1024 | FIFO depth per source |
| `BURST` | 16 | maximum AXI-HP burst |
| `FLUSH_CYCLES` | 256 | flush timeout |

All FIFO depths must be powers of two.

## How far to trust it

Every block is tested against behavioural models written independently of
it. The models come from the published FE-I4B, I2C, AXI and 8b/10b
conventions. Several things have not been tested:

- **Real devices.** The RTL has not met real hardware or timing closure.
- **Sensor line meaning.** The meaning of the four sensor lines is an
  assumption. A different sensor may need a different sequence, but the
  change is confined to `sensor_config`.
- **Command encodings.** The register map and the GBT command layout are
  not those of the original system, so host software written for it will
  not talk to this RTL without adaptation.
- **Line errors.** 8b/10b catches most single-bit errors as an invalid
  code or a disparity violation. A few turn one valid byte into another,
  sometimes with the disparity error showing up only one symbol later.
  Records carry no further check.
- **Link recovery.** The FE-I4B receiver relies on clean bit timing at one
  sample per bit. Recovering the bit phase of a real link is left to the
  input stage.
- **ADC throughput.** The ADC path cannot sustain its full rate (see above),
  and the original system's way of handling it is unknown.
