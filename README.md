# Readout over a bare Ethernet PHY: FPGA logic of a readout module

A readout module in a particle-physics experiment gathers data from front-end electronics
(FEE) and has to deliver it to a data acquisition (DAQ) computer. The usual way, a CPU with an
operating system running TCP/IP, is expensive in parts, power and latency. The method
implemented here leaves TCP/IP out. The FPGA packs the data into fixed-size packets with a
small header of its own, and places each packet directly in a raw Ethernet frame with the
unregistered EtherType **0xFF00**. An Ethernet PHY chip sends the frame to the DAQ computer over
its MII port. On the DAQ side a modified network driver picks out frames of type 0xFF00 and
hands them to user space. That driver is software and is not part of this RTL.

Reliability does not come from a transport protocol. Every packet carries a sequence number
(the *Counting No.*) and a CRC. The module keeps the last few packets in a local RAM. When the
DAQ finds a damaged or missing packet, it sends a small command frame back, and the module
sends that one packet again.

The RTL follows the block structure of Huang, Cao and Zheng, "A Data Transmission Method Based
on Ethernet Physical Layer for Particle Physics Experiment". That paper describes the method
at block level. It names the blocks, the packet fields, the frame format and the three-state
transmission chart. Most encodings, widths and buffer sizes are not in the paper. They are
choices made for this implementation, and each one is marked as such below.

## Data path

```
 fee_sdi ─► data_receiving ─► protocol_resolving ─► data_processing ─► event_building
 (serial)    bytes             FEE frames → words     trigger check,      event header,
                                                      zero compression    commit/rollback buffer
                                                                               │
   MII TX ◄── phy_interface (mii_tx_mac) ◄── local_ram ◄── data_repackage ◄────┘
                      ▲                      8 × 1024 B     1024-byte packets
                      │ slot to send
                tx_state_machine  ◄── retransmission requests ◄── protocol_resolving
                IDLE / TRANS / RE-TRANS                              ▲ commands
   MII RX ──► phy_interface (mii_rx_mac) ────────────────────────────┘
```

`readout_fpga_top` wires these blocks together. It also contains `fee_generator`, a test-data
source. The prototype board in the paper works the same way: the FPGA generates FEE-like data,
sends it out of an LVDS port, and loops it back into its own input. The generator's `gen_sdo`
and `gen_trigger` pins are meant to be connected to `fee_sdi` and `trigger` on the board. When
real front-end electronics drive those inputs, the generator pins are left unconnected.

## The packet and the frame

Each Ethernet frame carries exactly one packet. The packet is always 1024 bytes:

| bytes      | field        | content |
|------------|--------------|---------|
| 0          | Module No.   | identifies the readout module; set by DAQ command, reset value `MODULE_NO_INIT` |
| 1          | Counting No. | packet sequence number, modulo 256 |
| 2          | Packet Size  | number of **32-bit words** of raw data in this packet, 1..255 |
| 3 … 1022   | raw data     | up to 255 words, big-endian; unused words are zero |
| 1023       | CRC          | CRC-8, polynomial x⁸+x²+x+1, initial value 0, over bytes 0…1022 |

The frame on the wire:

| preamble + SFD | destination MAC | source MAC | type    | data              | FCS |
|----------------|-----------------|------------|---------|-------------------|-----|
| 7 × 0x55, 0xD5 | 6               | 6          | 0xFF00  | 1024 (the packet) | 4   |

The data field is far above the 46-byte minimum, so frames never need padding. The FCS is the
normal Ethernet CRC-32, so any network card accepts the frame.

**Why the size field counts words.** The source fixes the packet at 1024 bytes and gives one
byte each to Module No., Counting No., Packet Size and CRC. It also gives byte counts such as
500 as examples for the size field. A one-byte field cannot hold 500. If the four header and
CRC bytes sit inside the 1024-byte data field, 1020 bytes remain for raw data. In 32-bit words
that is 255, the largest value a byte can hold. So the size is counted in words here. If your
DAQ software expects byte counts, multiply by four.

**Events and fragments.** `event_building` puts one header word in front of each event:
`{event_number[15:0], data_words[15:0]}`. `data_repackage` then cuts the event, header
included, into packets of up to 255 words. The last packet of an event holds whatever words
remain, and the rest of its data area is zero. Every event starts a new packet, so a packet
never holds data from two events. To rebuild events, the DAQ concatenates packets in Counting
No. order, reads each header word, and takes that many words after it.

## Transmission control and retransmission

This is the part that needs the most care. It is implemented in `tx_state_machine`,
`data_repackage` and `local_ram`.

**Slots.** The local RAM holds `SLOTS` packets (8 by default). Packet *n* is written to slot
*n mod SLOTS*. `data_repackage` counts the packets it has finished (`wr_count`).
`tx_state_machine` counts the packets sent for the first time (`tx_count`). The packets from
`tx_count` up to `wr_count` are waiting to be sent. A new packet may be written only when
`wr_count − tx_count < SLOTS`, meaning its slot's old packet has already gone out once. It must
also wait if that slot is being retransmitted at that moment. Otherwise `data_repackage` stalls
and events back up in the event buffer. At 100 Mbit/s this rarely happens. At 10 Mbit/s, or
when the DAQ requests many retransmissions, it does.

**States.** The three states and their labels come from the transmission chart of the method:

* **IDLE**: nothing is being sent. When a packet is waiting ("valid data"), go to TRANS and
  send it.
* **TRANS**: stay while the frame is going out ("Cont."). At the end of the frame ("Fin."),
  count the packet as sent. Go to RE-TRANS if a retransmission request is waiting
  ("Err. Occur"), otherwise go back to IDLE.
* **RE-TRANS**: send every queued request from its slot, one frame each. Return to IDLE when
  the queue is empty ("Fin.").

One transition is this design's addition. If a request arrives while IDLE and no new packet is
waiting, the controller goes straight from IDLE to RE-TRANS. The chart does not draw this
arrow. Without it, a request for the last packet of a run would never be served.

**Which requests can be served.** A request names an 8-bit Counting No. It is served only if
that packet has already been sent once and is still in the RAM. The requested packet's age
(`tx_count − requested`, 1 meaning the most recent) plus the number of packets still waiting
must not exceed `SLOTS − 1`. Requests that fail this test are dropped and counted in
`rt_rejected`. The request queue holds four entries; further requests are counted in
`rt_dropped`. So, at the defaults, the DAQ can recover any of the last seven packets sent,
fewer while new packets are waiting. A DAQ that waits longer must accept the loss.

**Commit before release.** `event_building` writes an event into its buffer as the words
arrive, but the event is not visible to `data_repackage` until its last word has arrived and
the FEE checksum has passed. An event with a bad checksum is removed by moving the write
pointer back. So is an event that runs out of buffer space (`events_overflow`). The header slot
is reserved when the event starts and filled in at commit time, when the word count is known.

## FEE link and trigger

The source leaves the FEE protocol to each experiment. This design uses the following:

* Line: one serial lane, one bit per system clock, idle high. Each byte is sent as start bit 0,
  eight data bits LSB first, then stop bit 1. At 100 MHz that gives 80 Mbit/s of payload.
* Frame: `0xAA`, length high byte, length low byte (length in 32-bit words), the data words
  big-endian, then the XOR of all data bytes.
* Trigger: a trigger pulse is remembered until the next frame starts. A frame that starts with
  a trigger remembered, or with a trigger in the same clock, is valid. Any other frame is
  dropped whole.
* Zero compression, switched on by DAQ command: 32-bit words equal to zero are removed.

## DAQ commands

Commands arrive as Ethernet frames of type 0xFF00. They must be addressed to `SRC_MAC` (the
module's own address) or to broadcast, be at least 64 bytes long, have a good FCS and no
RX_ER. Payload byte 0 is the opcode and payload byte 1 is the argument:

| opcode | meaning |
|--------|---------|
| 0x01   | set Module No. to the argument |
| 0x02   | retransmit the packet whose Counting No. is the argument |
| 0x03   | zero compression: argument bit 0 = enable |

Unknown opcodes are counted in `bad_commands` and otherwise ignored.

## Clocking and timing

* There is one clock, `clk`, with an asynchronous active-low reset `rst_n`. The intended clock
  is 100 MHz. It must be at least twice the MII clock.
* The MII clocks (TX_CLK and RX_CLK, 25 MHz at 100 Mbit/s) come from the PHY. They are not used
  as clocks here. They are synchronised into `clk`, and the MAC logic acts once per detected
  rising edge. TXD and TX_EN therefore change two or three system clocks after a TX_CLK rising
  edge, and the PHY takes them on the next rising edge. The same logic also works at
  10 Mbit/s (2.5 MHz MII clocks); the end-to-end test runs part of the time that way.
* A frame is 1050 bytes from preamble to FCS: 2100 MII clocks, or 84 µs at 100 Mbit/s. It is
  followed by 24 idle MII clocks, the 96-bit inter-frame gap. With packets waiting, the next
  frame starts as soon as the gap is over (24 idle MII clocks were measured between
  back-to-back frames). The line then carries 1020 raw bytes in every
  1062 byte times, so the payload rate is 96 Mbit/s of a 100 Mbit/s line.
* `data_repackage` writes one byte per clock. A full packet takes 1 + 3 + 255 × 5 + 1 clocks,
  about 12.8 µs.
* `data_receiving` delivers each byte 13 clocks after the first clock edge that sees its start
  bit.

## Parameters (top level)

| parameter        | default               | meaning |
|------------------|-----------------------|---------|
| `SLOTS`          | 8                     | packets held in the local RAM (power of two) |
| `EVB_DEPTH`      | 2048                  | event buffer, 32-bit words (largest event 2047 words) |
| `MODULE_NO_INIT` | 1                     | Module No. after reset |
| `SRC_MAC`        | 02:00:00:00:00:01     | this module's MAC address |
| `DST_MAC`        | ff:ff:ff:ff:ff:ff     | DAQ computer's MAC address |
| `GEN_GAP`        | 16                    | idle bits between generator frames |

The packet size (1024), the EtherType and the command codes are constants in `readout_pkg`.
All sizes are the source's own values or choices of this design; none was reduced for tools.
At the defaults the design needs 64 Kibit for the local RAM and 64 Kibit for the event buffer.

## Status

The `status` output of the top is a packed struct, `readout_status_t`. It holds counters for:
framing errors, accepted and rejected frames, suppressed words, built, bad and overflowed
events, packets built and sent, all frames sent, re-package stall cycles, retransmissions,
rejected and dropped requests, good and bad command frames, unknown opcodes, and generator
frames. It also shows the current Module No., the zero-compression switch and the state of the
transmission controller.

## Where this design departs from the source

The source gives a block diagram, a packet table, a frame table and a state chart, with prose
around them. Where the RTL differs from those, or reads an unclear point one way, it is listed
here.

* **Packet size.** The source's "1024" is read as the size of the whole packet, and the size
  field counts 32-bit words (see "Why the size field counts words" above). A packet therefore
  holds at most 1020 raw bytes, not 1024.
* **Route of the outgoing data.** The block diagram draws re-package ↔ protocol resolving ↔
  PHY interface. Here the transmit MAC inside `phy_interface` reads each packet straight from
  the local RAM slot that `tx_state_machine` names. Received command frames go from the
  receive MAC to `protocol_resolving`, as drawn. The data is the same; the path is shorter.
* **Transmission controller.** The source draws the IDLE / TRANS / RE-TRANS chart but does not
  place it in the block diagram. It is a block of its own here, `tx_state_machine`.
* **FEE direction.** The diagram draws a two-way arrow between data receiving and protocol
  resolving. The source names nothing that goes back to the FEE, so `data_receiving` only
  receives.
* **"Err. Occur".** The source's error is a check mismatch found by the DAQ. The module hears
  of it only through a retransmit command, so TRANS goes to RE-TRANS when such a request is
  waiting at the end of a frame. IDLE → RE-TRANS is added (see "States").
* **Retransmission window.** Only packets still in the local RAM can be sent again: at most the
  last `SLOTS − 1` sent. The source sets no limit.
* **Module No.** The source sets it "during system initializing". Here it has a reset value
  and can be changed by command at any time; packets built afterwards carry the new number.
* **Trigger, zero compression, FEE framing, command format, CRC-8 polynomial.** The source
  names these functions but gives no encoding. Everything under "FEE link and trigger" and
  "DAQ commands" is this design's own.

## What is not here

* **The Ethernet PHY chip.** It is a bought part; a 100 Mbit/s device is used on the
  prototype. The top's MII pins connect to it.
* **GMII.** The source mentions MII or GMII. Only MII is built.
* **The DAQ side.** This covers the modified Linux network driver, which sends type-0xFF00
  frames to a raw-data processing module and a memory mapped into user space, and the DAQ's
  policy for detecting loss and asking for retransmission. Both are software. The end-to-end
  testbench contains a small DAQ model that does both jobs.
* **The front-end electronics.** They are external; `fee_generator` stands in for them.

## Verification

Every block has a self-checking testbench in `tb/` named `tb_<module>`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog. `tb/tb_ref_pkg.sv` holds
the reference models. They are written separately from the RTL: the two CRCs in bit-serial
form (the CRC-32 model is checked against the standard test value, CRC-32("123456789") =
0xCBF43926), the generator's data pattern, and a builder for command frames.

`tb_readout_fpga_top` runs the whole module at its default parameters, for about 1.8 million
clocks (18 ms of simulated time, a few seconds of Verilator run time). The generator is looped back, and MII connects to a PHY-and-DAQ model. The DAQ model
checks every frame and packet, rebuilds each event and compares it word by word. The test
makes each of the following happen and checks it:

* frames with and without a trigger;
* an FEE checksum error;
* zero compression;
* events of up to eight packets, with zero-filled last packets;
* an event larger than the event buffer;
* re-package stall, with the PHY switched to 10 Mbit/s;
* back-to-back frames at line rate, carrying raw data at 96.05 Mbit/s as measured between
  frame starts;
* a Module No. change by command;
* two frames damaged on the line, each recovered by a retransmission request, one through
  TRANS → RE-TRANS and one through IDLE → RE-TRANS;
* a repeated request for a packet already received, answered with an identical copy.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/readout_pkg.sv tb/tb_ref_pkg.sv tb/tb_readout_fpga_top.sv \
    --top-module tb_readout_fpga_top -o sim
./obj_dir/sim
```

Replace the last file and the top module with any other `tb_*` to run that test. The tests use
only `$urandom`, so they run on two-state simulators. To change the design, edit the
parameters of `readout_fpga_top`. The block testbenches override the buffer sizes only where a
smaller buffer makes a case easier to reach.
