# Torus network processor (NWP) in SystemVerilog

A torus network gives every compute node six direct neighbours (X+, X-,
Y+, Y-, Z+, Z-). The nearest-neighbour traffic of lattice codes then needs
no switch: each node's FPGA holds a **network processor (NWP)** that sits
between the CPU's PCIe port and six serial links. It works like this:

* The sender **writes the message into the NWP**. The injection buffer of
  every link and virtual channel is mapped into the CPU's address space.
  The CPU simply stores the data there ("Pput", programmed I/O with
  write-combining). The link, VC and position are taken from the address.
* The NWP cuts the stream into **128-byte packets**. It sends them over
  the link reliably and in order: each packet has a CRC and a sequence
  number, the receiver returns ACK or NACK, and the sender replays from a
  buffer.
* The receiver **posts a credit** for a message. When a credit and a
  received packet of the same link and VC meet, the NWP writes the packet
  into CPU memory. After the last packet it writes a notification.

This repository holds synthesizable RTL for the whole NWP, from the PCIe
transaction-layer interface down to the 32-bit PHY interface of each link.
It also holds a self-checking testbench for every block and for the top.
The vendor PCIe hard IP and the external XAUI PHY chips are not part of
the RTL. Their interfaces are the top-level ports.

## Block structure

```
             Avalon-ST rx (128 bit)                  Avalon-ST tx (128 bit)
                    |                                        ^
                +---v---+                                 +--+--+
                |  pic  |-- credits, register writes ---+ | poc | <- register
                | 6 x reorder_buffer                    | +--^--+    reads
                +---+---+                               |    | delivery streams
                    | 128-bit packets + {vc,pidx}       |    | (data + address)
      +-------------v-----------------------------------v----+------+
      | link_module  x6                                             |
      |  send:    tx_fifo -> link_tx (tnw_crc32, tx_buffer) -> phy_tx
      |  receive: phy_rx -> link_rx (tnw_crc32) -> 8 x rx_fifo -> match
      |  link_regs (config / status / debug counters)               |
      +-------------------------------------------------------------+
```

| Module | Role |
|---|---|
| `nwp_top` | PIC, POC and six link modules |
| `pic` | Decodes inbound TLPs: injection writes, credits, register access. Holds one `reorder_buffer` per link |
| `reorder_buffer` | Puts 16/64-byte write fragments back into order before they enter txFifo |
| `poc` | Builds outbound TLPs: packet writes, notifications, read completions |
| `link_module` | One link: send half, receive half, registers |
| `tx_fifo` | Injection buffer: 128-bit entries with {VC, packet index}, read as 32-bit words |
| `link_tx` | Packet framing, CRC, txBuffer, ACK/NACK handling, resend mode, timeout |
| `tx_buffer` | Copies of sent packets (header and payload) until they are acknowledged; a resent packet gets its CRC computed again |
| `tnw_crc32` | CRC-32, one 32-bit word per cycle |
| `link_rx` | Packet decode, CRC check, ACK/NACK, discarding until RESTART |
| `rx_fifo` | Reception FIFO of one VC, with speculative write and commit/drop |
| `match` | Credit queues per VC; pairs credits with packets round-robin and computes addresses |
| `link_regs` | Registers and event counters |
| `tnw_fifo` | Small generic FIFO (credit queues) |
| `tnw_pkg` | Shared constants, types and functions |

A single clock (250 MHz in the original) drives everything. Reset is
synchronous and active high. On a board, the PHY receive clock would need
a clock-domain crossing in front of `phy_rx`.

## The link protocol

This is the heart of the design and the part that needs the most care.
The original describes only its elements: a 32-bit header, 128 bytes of
payload, a 32-bit CRC, ACK/NACK feedback, a RESTART command and a resend
mode that replays txBuffer. The framing below is this design's own.

**PHY words.** Each link moves one 36-bit word per cycle,
`{ctrl[3:0], data[31:0]}`, in the style of XGMII. `ctrl = 4'b0000` is a
data word. `ctrl = 4'b0001` is a control word laid out as follows:

| byte | content |
|---|---|
| 0 | K code: `0x07` IDLE, `0xFB` SOP (start of packet), `0x9C` FB (feedback only), `0x5C` RESTART |
| 1 | feedback type: none, ACK, NACK |
| 2 | feedback sequence number |
| 3 | `~(byte1 ^ byte2)`, a check byte |

A control word whose check byte is wrong counts as a receive error.

**Packet.** A packet is 35 words:

1. SOP;
2. header `{seq[31:24], vc[23:21], reserved, pidx[5:0]}`;
3. 32 payload words;
4. CRC-32 over the header and payload.

The CRC uses polynomial 0x04C11DB7, starts at all ones, is not reflected
and is fed MSB first, one word per cycle. Packets go out back to back, so
a loaded link carries 128 bytes every 35 cycles. At 250 MHz that is
**0.914 GB/s per direction**, the link bandwidth the original quotes.

**Feedback.** The receiver acknowledges **cumulatively** with sequence
numbers.

- ACK(s) means every packet up to s arrived.
- NACK(s) means packets before s arrived, and s and everything after it
  must be sent again.

The feedback rides in the SOP word of the next outgoing packet. When no
packet is ready, it goes in a separate FB word. On a loaded link it
therefore costs no bandwidth.

**Receiver** (`link_rx`):

- It writes payload **speculatively** into the VC's FIFO.
- A good CRC commits the packet and schedules an ACK.
- Any error drops the partial packet, sends NACK(expected seq) and
  discards everything until RESTART. Errors are a bad CRC, a wrong
  sequence number, a control word inside a packet, a data word outside
  one, or a bad check byte.

**Sender** (`link_tx`):

- Each packet (header and payload) is copied into `tx_buffer`, slot seq mod
  NBUF. A replayed packet passes through the CRC unit again.
- A NACK puts the sender in resend mode. It finishes the current packet,
  sends RESTART, replays every unacknowledged packet from the buffer, and
  takes new data only once all of them are acknowledged.
- A NACK during resend mode starts the procedure again.
- A timeout covers a lost packet or a lost feedback word. If packets are
  outstanding and no feedback arrives for `TIMEOUT` cycles (register 1,
  default 4096), the sender acts as after a NACK.
- At most NBUF = 16 packets are in flight. 8-bit sequence numbers are
  ample for that.

**Back-pressure.** When the target VC's reception FIFO has no room for a
whole packet, the receiver refuses the packet with a NACK (event "busy").
The sender keeps replaying until room appears. So a full reception buffer
stalls the link, as the original requires, and never loses data. The price
is link bandwidth spent on refused packets while the buffer is full.

## Processor interface

**Address map (PIC).** The PIC decodes the low 21 bits of the BAR offset:

| bits | meaning |
|---|---|
| [20:19] | region: 0 injection, 1 credit, 2 registers |
| [18:16] | link |
| [15:13] | VC (injection, credit) |
| [12:7] | packet index (injection) |
| [6:4] | 16-byte chunk within the 128-byte packet (injection) |
| [7:2] | register index (registers) |

The regions work as follows:

- **Injection.** A memory write of 16 or 64 bytes (or any multiple of 16
  up to 128) stores chunks of a packet.
- **Credit.** A 16-byte write to the credit region posts the credit
  `{notify_addr[127:64], npkts[63:48], dest_addr[47:0]}` for that link and
  VC.
- **Registers.** One-word writes set a register. One-word reads are
  answered by the POC with a completion.

Other TLPs are consumed and dropped.

**Re-ordering.** Write-combining buffers can be flushed in any order.
Each link and VC therefore has a window of `RB_SLOTS` = 4 packet slots,
starting at the next packet index the link expects.

- A chunk lands in slot pidx mod 4 and sets one bit of that slot's 8-bit
  mask.
- When the oldest slot is full, its 8 entries go to txFifo (if txFifo has
  room) and the window moves on.
- A write that falls outside the window, or finds txFifo full, stalls the
  PCIe receive port until it fits. This is the PIO form of back-pressure.

Software must keep the packet index counting (mod 64) per link and VC,
which is the address it writes to anyway.

**Delivery (match + POC).**

- Each VC has a queue of `CR_DEPTH` = 4 credits.
- When the head credit's VC FIFO holds a packet, `match` streams it
  (8 beats of 128 bits) with the address dest_addr + 128 × (packets
  already delivered for that credit).
- Several ready VCs are served round-robin. The POC serves the six links
  and the register-read completions round-robin too.
- Each packet becomes one 128-byte memory write with a 4-DW header.
- After the last packet of a credit, a 16-byte notification write goes to
  notify_addr: `{DW3 = 1, DW2 = 0, DW1 = npkts, DW0 = link<<16 | vc}`.

**Avalon-ST layout.** The bus is 128 bits wide, with DW0 of the header in
bits [31:0]. The header takes one beat. Payload follows in separate,
16-byte aligned beats. The single exception is the read completion, which
sends its 3-DW header and data word in one beat.

## Registers (per link)

| index | name | |
|---|---|---|
| 0 | CTRL | bit 0 transmitter enable (reset 1) |
| 1 | TIMEOUT | cycles without feedback before a resend (reset 4096) |
| 2 | STATUS | [0] resend mode, [1] receiver discarding, [15:8] packets in flight, [31:16] free txFifo entries |
| 16+e | event counters | a write clears the counter |

The events are:

| e | event |
|---|---|
| 0 | packet sent |
| 1 | packet resent |
| 2 | RESTART sent |
| 3 | timeout |
| 4 | NACK received |
| 5 | good packet |
| 6 | CRC error |
| 7 | sequence error |
| 8 | protocol error |
| 9 | busy refusal |
| 10 | credit overflow |
| 11 | packet delivered |

## Sizes

| parameter | default | where |
|---|---|---|
| links | 6 | fixed by the torus |
| virtual channels | 8 | `NUM_VC` |
| payload per packet | 128 B = 32 × 32 bit | `PKT_WORDS` |
| PHY data bus | 32 bit | |
| `TXF_DEPTH` | 64 entries of 16 B (1 KB) per link | own choice |
| `NBUF` | 16 packets in txBuffer | own choice |
| `RXF_DEPTH` | 32 entries of 16 B (4 packets) per VC | own choice |
| `CR_DEPTH` | 4 credits per VC | own choice |
| `RB_SLOTS` | 4 packets of re-order window per VC | own choice |

The links, VCs, payload size and PHY bus width are given by the original
design. It gives no buffer sizes, so all the depths are chosen here. At
the defaults, coarse synthesis of `nwp_top` gives about 10,200 word-level
cells, 8,200 flip-flop bits and 577 kbit of memory.

## Where this departs from the original or goes beyond it

- **Framing, feedback and timeout.** The control-word framing, cumulative
  sequence-number feedback, piggy-backing, check byte and timeout are this
  design's choices. The original says only that the protocol uses the
  8b/10b control symbols of the PHY.
- **Back-pressure.** The receiver refuses packets with a NACK when the
  reception FIFO is full, rather than using a dedicated flow-control
  message.
- **Clock.** One clock; the original shows separate PHY clocks.
- **Things the original does not give, all invented here:** the address
  map, the credit and notification formats, and the register map.
- **Not built:**
  - the Nget send scheme (DMA by the NWP), which the original describes as
    an extension under development;
  - the block labelled "other logic";
  - the PCIe hard IP;
  - the PHY chips.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog. `tb/phy_model.sv`
is a behavioural channel model: two PHYs and a cable with 30 cycles of
latency. It can flip a bit in a data word or damage feedback words.

| testbench | what it shows |
|---|---|
| `tb_tnw_crc32` | CRC against an independent bit-serial model |
| `tb_tx_fifo`, `tb_rx_fifo` | Random traffic against queue models; commit/drop of speculative packets |
| `tb_tx_buffer` | Random slot writes read back against a model |
| `tb_link_tx` | Framing, resend on NACK, RESTART, timeout, 35-cycle spacing |
| `tb_link_rx` | ACK on good packets; NACK and discarding on CRC, sequence and protocol errors; recovery at RESTART; busy refusal |
| `tb_match` | Credit/packet pairing, addresses, notification flags, round-robin |
| `tb_link_regs` | Register map and counters |
| `tb_reorder_buffer` | Random arrival order of chunks and packets; window check |
| `tb_pic` | Injection writes in both header sizes and orders; credit; register write and read; stalls; dropping |
| `tb_poc` | Every outbound TLP parsed against a model, with random stalls on both sides |
| `tb_link_module` | Two links back to back, both directions, random VCs |
| `tb_nwp_top` | The whole NWP |

`tb_link_module` first shows packets sent every 35 cycles with no resends.
It then injects data and feedback errors and checks that every packet
still arrives exactly once and in order.

`tb_nwp_top` runs the whole NWP at its default sizes. Each link is looped
to its opposite link through the channel model. It sends messages as
Avalon-ST TLPs, in 16- and 64-byte pieces in scrambled order, and checks
each memory write, each notification and each completion coming out. It
also counts that every mechanism occurred at least once:

- re-ordering;
- stalls of the PCIe receive port;
- piggy-backed feedback;
- CRC error, resend and RESTART;
- busy refusal while no credit is posted;
- a round-robin switch;
- a timeout.

`tb_nwp_workloads` repeats the original's two measurements on the whole
NWP, using a 60-cycle channel (the 0.24 us that two PHYs add).

- **Bandwidth.** With 1, 2 and 3 links sending at once, each link sends
  its 40 packets exactly 35 cycles apart. Host memory receives about
  0.93, 1.86 and 2.79 GB/s in total.
- **Latency.** A single 128-byte message takes 108 cycles (432 ns) from
  its last injection beat to its memory write leaving the NWP. The
  notification follows 10 cycles later.

Run any testbench with plain Verilator, for example:

```
verilator --binary --timing --assert -y rtl -Irtl -Itb rtl/tnw_pkg.sv \
    tb/tb_nwp_top.sv --top-module tb_nwp_top -Mdir obj_top
obj_top/Vtb_nwp_top +verilator+rand+reset+2
```

The full-size top test finishes in about a second.

## Trust and limits

- The RTL has been linted with Verilator and elaborated and synthesised
  with Yosys (slang front end). It has not been placed on an FPGA.
- PCIe compliance has not been checked: ordering rules, 4 KB boundary
  crossings and error handling are not covered. The PIC handles only the
  TLPs listed above.
- Timing at 250 MHz is unverified. The longest paths are the round-robin
  pickers and the combinational txBuffer read.
- The design tolerates corrupted data and feedback words. A lost RESTART
  is covered by the timeout. Link training and recovery from a dead link
  are not modelled.
