# QPACE network processor (NWP) in SystemVerilog

QPACE is a massively parallel machine for lattice QCD built from node cards. Each card
carries one PowerXCell 8i processor and one FPGA, the network processor (NWP). The NWP is an
I/O fabric. On one side it talks to the processor over a fast serial link. On the other side it
drives:

- six links of a three-dimensional torus, towards the nearest neighbours;
- a Gigabit Ethernet port;
- a few slow interfaces: two UARTs, the configuration flash, the PHY management buses and a
  small tree network for global signals.

This repository has RTL for the parts of the NWP that belong to the machine's designers rather
than to a vendor:

- the torus links;
- the controllers that move data between the links and the processor;
- the control-register bus with its devices;
- the global-signal port;
- the Ethernet nibble interface.

It also has the small piece of logic that forms one level of the global-signal tree on the
backplane cards. Everything is parameterised at the sizes of the real machine. Everything
simulates with plain Verilator.

The central idea of the torus network is a **push-only, hardware-reliable link with
credit-steered delivery**. The sender's processor does nothing except write a message into a
link. From then on the NWP does the following by itself:

- splits the message into packets;
- protects each packet with a checksum;
- keeps a copy of each packet until the neighbour acknowledges it;
- retransmits a packet that is refused or lost.

The receiving NWP holds arriving packets until the receiving processor has announced, with a
*credit*, where the data should go. Only then does it write them into the processor's memory,
and it reports completion. Nothing is ever dropped silently. Every stage either accepts data
or pushes back on the stage before it.

## Data path at a glance

```
 processor ──128-bit writes──► outbound_write_ctrl ──► torus_link[0..5] ──XGMII──► PHY ══ cable
                                                        │  torus_tx  ◄── ACK/NACK ──┐
 processor ◄─128-bit writes─── inbound_write_ctrl ◄──── │  torus_rx  ───────────────┘
                                                        └─ registers on the DCR bus
 processor / service processor ─► dcr_master ─► DCR bus ─► cfg_status, uart x2, spi_master,
                                                          global_signals, mdio_master x2, links
```

`nwp_top` puts these together. The processor-side serial link and its protocol logic are vendor
blocks. They are represented by two plain write ports:

- `s_*` carries writes from the processor into the NWP;
- `m_*` carries writes from the NWP into the processor.

Each of these ports is valid/ready, one 128-bit beat per clock, with an address.

## Sending: the write address is the command

A message is a multiple of 128 bytes and is written into the NWP as 128-bit beats. All control
information is carried in the address of each write, so no descriptor has to be built. The
36-bit address of a write into the NWP window is:

| bits  | field  | meaning                                                             |
|-------|--------|---------------------------------------------------------------------|
| 35:34 | region | 0 = packet data for a link, 1 = credit for a link's receiver        |
| 33:31 | link   | 0..5                                                                |
| 30:28 | vc     | virtual channel 0..7                                                |
| 27:7  | roff   | remote offset, in units of 128 bytes, sent in the packet header     |
| 6:4   | beat   | beat 0..7 within the 128-byte packet                                |
| 3:0   | –      | byte offset, always 0                                               |

A credit write (region 1) carries {packet count in bits 47:32, local byte offset in bits 31:0}
in its data.

`outbound_write_ctrl` decodes each beat after one register stage and hands it to the addressed
link:

- A write the link cannot take stays unacknowledged until it can. A full transmit FIFO
  therefore simply stalls the processor; this is the first of the three back-pressure
  mechanisms.
- Writes to a link or region that does not exist are acknowledged, dropped and counted.

## The torus link

### Transmit FIFO and retransmission (`torus_tx`)

Each link owns a 2 kB transmit FIFO, which holds 16 packets. A packet is sent as soon as its
eighth beat has been written. The FIFO is managed as a go-back-N window with three pointers:

- `wr_ptr`: the next free slot;
- `send_ptr`: the next packet to put on the wire;
- `ack_ptr`: the oldest packet not yet acknowledged.

The pointers are 5 bits wide and double as the packet sequence number. Five bits is one more
than the 16-slot window needs, so an old sequence number can never be mistaken for a new one.

- An ACK for `ack_ptr` frees that slot.
- A NACK for `ack_ptr`, or no ACK for 2048 cycles, rewinds `send_ptr` to `ack_ptr` at the next
  packet boundary. That packet and everything after it is sent again.
- ACKs or NACKs for a packet that has not been sent yet are ignored. This guards against a
  stale answer arriving after a rewind.
- When all 16 slots hold unacknowledged packets, the write port stops accepting.

On the wire a data packet occupies 36 XGMII cycles (32 bits per cycle), 37 when it carries an ACK:

```
START | header | 32 payload words | CRC-32 | TERMINATE
```

At 250 MHz this gives 128/36 × 1 GB/s ≈ 0.89 GB/s of payload per direction. Header and checksum
add 8 bytes to each 128-byte packet. The other 4 bytes of overhead come from the framing
characters.

The header is one 32-bit word:

| bits  | field                                     |
|-------|-------------------------------------------|
| 31:30 | type: 0 data, 1 ACK, 2 NACK               |
| 29:27 | virtual channel                           |
| 26:22 | sequence number                           |
| 21    | reserved                                  |
| 20:0  | remote offset (128-byte units)            |

ACK and NACK travel as 4-byte command packets (START, command word, TERMINATE) over the
*reverse* direction of the same link. The receiver of a link produces them and hands them to the
transmitter of the same link. If a data packet is going out when the command is queued, the
command word rides inside that packet's frame, between the CRC and TERMINATE (37 cycles instead
of 36). Otherwise it goes out at the next packet boundary, ahead of any data, as a 3-cycle frame
of its own. The same transmitter also receives, from its own receiver, the commands that the neighbour sent about
our packets. Data and acknowledgements for both directions therefore share each cable.

The checksum is CRC-32 with polynomial 0x04C11DB7, initial value all ones, processed
most-significant bit first over the header and payload words, with no final inversion.

### Receive buffer, credits and virtual channels (`torus_rx`)

The receiver checks a packet's framing and CRC, its sequence number and whether one of its eight
buffer slots is free. It then answers as follows:

| condition                                              | answer                                      |
|--------------------------------------------------------|---------------------------------------------|
| good CRC, expected sequence number, slot free          | ACK; packet stored, expected number advances |
| bad CRC or broken framing                              | NACK carrying the expected number           |
| no slot free                                           | NACK carrying the expected number           |
| a different sequence number                            | dropped without an answer                   |

A dropped packet is part of a window that is being resent anyway.

Stored packets wait in a queue per virtual channel. The processor announces a receive area by a
credit: a local byte offset and a number of packets. Credits queue per virtual channel (4 deep).
A packet can leave the buffer only when its VC's queue head has a credit. The eight VCs are
served round-robin among those that have both a packet and a credit, so a channel whose receiver
is slow to give credit does not block the others. Such overtaking is counted.

A packet is written to the processor at:

```
address = base[vc] + 128 × remote_offset + local_offset
```

The base address is a register per link and VC. The remote offset comes from the header. The
local offset comes from the credit. The eight beats go to consecutive 16-byte addresses. After
the credit's last packet has been written, the link raises `notify_valid` with the VC for one
cycle, and the next credit of that VC comes into use.

### Registers and statistics (`torus_link`)

`torus_link` joins transmitter and receiver and gives them DCR registers:

| register | contents                                    | access     |
|----------|---------------------------------------------|------------|
| 0..7     | base address of VC 0..7, bits 31:0          | read/write |
| 8..15    | base address of VC 0..7, bits 41:32         | read/write |
| 16       | {retransmissions, data packets sent}        | read only  |
| 17       | {packets received, timeouts}                | read only  |
| 18       | {no-buffer NACKs, checksum NACKs}           | read only  |
| 19       | packets that overtook a waiting VC          | read only  |

## Delivering to the processor (`inbound_write_ctrl`)

The six links compete for the one write port into the processor. A round-robin arbiter grants
one link at a time and keeps the grant for the whole packet (eight beats). Beats of different
packets never interleave, and no link waits for more than five other packets. The arbiter counts
packets that finished while another link was waiting. When the processor stalls the port, the
receive buffers fill. The receivers then NACK new packets and the senders resend them later. This
is how back-pressure from the receiving processor reaches the sending FIFO without losing data.

## Control-register (DCR) bus

All slow devices and all link registers sit on one simple shared bus. Its addresses are 10 bits:

- bits 9:6 select the device;
- bits 5:0 select the register.

The device numbers are:

| device | unit                                      |
|--------|-------------------------------------------|
| 0      | configuration/status/version              |
| 1, 2   | UARTs                                     |
| 3      | flash SPI                                 |
| 4      | global signals                            |
| 5      | MDIO to the torus PHYs                    |
| 6      | MDIO to the Ethernet PHY                  |
| 8..13  | torus links 0..5                          |

The bus works like this:

- A request (`req`, `we`, `addr`, `wdata`) is held by the master until the addressed device
  answers with a one-cycle acknowledge and read data.
- The devices' answers are OR'ed together.
- A device acknowledges one cycle after it sees its request.

`dcr_master` has two clients and alternates between them when both wait:

- **The processor**, through a request port (`c_*`). A request is taken on `c_valid && c_ready`,
  and `c_done` pulses with the read data.
- **The service processor**, the card's management microcontroller, through an SPI slave. SPI
  mode 0 is used, MSB first, and SCLK may be at most clk/8. A frame is a 16-bit header
  {we, 5'b0, addr} followed by either:
  - 32 write-data bits; or
  - 8 turnaround bits and then 32 read-data bits on MISO.

An access that is not acknowledged within 64 cycles ends anyway. The processor sees `c_err`, and
the service processor reads 0xDEADBEEF.

### Devices

- `cfg_status` has five registers:
  - version (0x00010000);
  - a configuration word, which drives the output `cfg_o`;
  - a status word (`{outbound errors, arbitration counter, link busy flags}` in the top);
  - scratch;
  - a free-running cycle counter.
- `uart` is 8N1 with 16-byte FIFOs in each direction. Its registers are:
  - data: a read returns the valid flag in bit 8;
  - status: overrun, tx full, tx empty, rx not empty. Writing bit 3 clears the overrun flag;
  - divisor: clocks per bit, reset value 1441, which is 115200 baud at 166 MHz.

  Its interrupt is high while received data wait. One UART goes to the service processor, the
  other to the root card.
- `spi_master` exchanges one byte per write in SPI mode 0. Register 2 holds the SCK half period
  and a flag that keeps chip select low across bytes, so a whole flash command can be issued.
- `mdio_master` sends IEEE clause-22 management frames. The 64 bits are 32 preamble ones, start,
  opcode, PHY address, register address, turnaround and 16 data bits. It releases the line for
  the turnaround and data of a read. There is one instance for the torus PHYs, which are also
  where the redundant PHY interface is selected, and one for the Ethernet PHY.
- `rgmii_adapter` turns the Ethernet MAC's byte stream into 4-bit nibbles at the core clock,
  low nibble first, with the control line high during the frame. It does the reverse on
  receive. The MAC itself is an FPGA hard core and is represented by the `eth_*` byte ports.

## Global signals

The global-signal network is a tree of two wires in each direction. This design gives the lines
these meanings:

- **Line 0, condition / barrier.** Tree nodes AND it over their children. The root turns the
  result round and sends it down to every node. A node can thus test a condition that must hold
  everywhere. `global_signals` uses it for a four-phase barrier:
  1. Software starts the barrier.
  2. The node raises line 0 and waits until the tree reports it high everywhere.
  3. It lowers line 0 and waits until the tree reports it low again.
  4. It sets `barrier_done`.

  The second half stops a fast node from running through two barriers at once.
- **Line 1, kill.** Tree nodes OR it. If any node raises it, every node in the partition gets
  `irq_kill`, which stays latched until software clears it.

`gsig_tree_node` is the logic of one tree level on a backplane card. It takes 16 node cards by
default, and a mask selects the cards in the partition. It registers the result once on the way
up and once on the way down. Set `IS_ROOT` at the top of the tree. The node cards' down lines
pass a two-flop synchroniser.

## Clocking and reset

The whole NWP runs on one clock `clk` with an asynchronous active-low reset `rst_n`. The real
FPGA runs the processor-side core at 166 MHz (the target was 208 MHz) and the XGMII ports at
250 MHz. Here both are the same clock. The testbenches use 250 MHz, so that link rates and
latencies come out in real units. Moving the link side to its own clock would need a
clock-domain crossing at the transmit FIFO and the receive buffer. That crossing is not part of
this RTL.

## Parameters

| parameter           | default | where                                       | origin                     |
|---------------------|---------|---------------------------------------------|----------------------------|
| `NUM_LINKS`         | 6       | package                                     | the machine                |
| `NUM_VC`            | 8       | package                                     | the machine                |
| `FIFO_BYTES`        | 2048    | `nwp_top`, `torus_link`, `torus_tx`         | the machine                |
| packet payload      | 128 B   | package                                     | the machine                |
| XGMII width         | 32 bit  | package                                     | the machine                |
| beat width          | 128 bit | package                                     | the machine                |
| `RX_SLOTS`          | 8       | `nwp_top`, `torus_link`, `torus_rx`         | chosen here                |
| `TIMEOUT`           | 2048    | `nwp_top`, `torus_link`, `torus_tx`         | chosen here                |
| `CREDIT_DEPTH`      | 4       | `torus_rx`                                  | chosen here                |
| `UART_DIV`          | 1441    | `nwp_top`                                   | chosen here (115200 baud)  |
| `N_CHILD`           | 16      | `gsig_tree_node`                            | the machine (one backplane row) |
| processor address   | 42 bit  | package                                     | chosen here                |
| sequence number     | 5 bit   | package                                     | chosen here                |
| DCR bus timeout     | 64      | `dcr_master`                                | chosen here                |

`FIFO_BYTES / 128` must not exceed 16 while the sequence number has 5 bits. An assertion in
`torus_tx` checks this.

## What is not here

The following are outside the RTL. They appear as ports, or as a behavioural model in the test
bench:

- the processor and its serial link;
- the vendor's link logic and its master/slave interfaces;
- the flash reader;
- the Ethernet MAC and the DMA that feeds it;
- the 10-Gigabit PHYs and cables;
- the service processor;
- the CPLD logic of the backplane cards other than the global-signal tree.

The choice between the PHYs' primary and redundant serial interfaces is made in the PHYs, through
MDIO. That choice lets eight cards form one ring of eight or two rings of four. Nothing in the
NWP's data path changes with it.

Points where this design fills gaps and could differ from the machine:

- the exact retransmission protocol (go-back-N and its timeout);
- the header layout, framing, CRC polynomial and sizes of the receive buffer and credit queues;
- how credits and notifications are passed;
- the DCR protocol and register maps;
- the meaning of the two global lines.
- the single clock for the whole NWP (the machine's links and XGMII run in their own clock
  domains);
- the exchange bandwidth: 0.86 GB/s per direction against the paper's 0.9 GB/s.

## Simulation

Each unit has a self-checking testbench in `tb/` named `tb_<module>`. Each prints
`TB_RESULT checks=<n> failures=<m>` and stops, and each has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/qpace_pkg.sv tb/tb_torus_link.sv --top-module tb_torus_link -Mdir obj -o sim
obj/sim
```

`tb_nwp_top` runs the whole NWP at its default sizes: two NWPs joined by all six links through a
PHY/cable model with 40 cycles of delay. It checks that every packet lands at its computed
address with the right data. It also makes each mechanism happen and counts it:

- transmit FIFO back-pressure;
- a NACK after a corrupted packet;
- a resend after a lost packet;
- NACKs from a full receive buffer;
- a VC overtaking one that waits for credit;
- arbitration between links;
- completion notifications;
- DCR accesses from the processor and over SPI;
- UART, flash SPI, MDIO and the Ethernet nibble interface;
- a barrier and a kill through a tree node.

Measured results:

- about 99 cycles (0.4 µs at 250 MHz) from a packet's arrival in the transmit FIFO to its last
  write into the receiving processor, 40 of those cycles being the modelled PHY/cable delay;
- 0.865 GB/s for a 64-packet stream on one link while the other direction carries traffic too,
  against the 0.89 GB/s the framing allows.

`tb_nwp_workloads` runs the two communication patterns of the paper's performance section on
two full-size NWPs:

- ping-pong of one 128-byte packet: round trip / 2 = 99.4 cycles = 0.40 µs at 250 MHz;
- a bidirectional exchange over one link, four messages in flight per direction on four VCs,
  with messages of 1, 4, 16 and 64 packets: 0.615, 0.785, 0.843 and 0.859 GB/s per direction.
  With traffic both ways every data packet also carries one ACK word, so the limit of this
  framing is 128/37 × 1 GB/s = 0.865 GB/s. The paper quotes 0.9 GB/s as its theoretical limit;
  this design stays about 4% below it because of its START/TERMINATE framing.

The whole run takes well under a second of simulation time.
