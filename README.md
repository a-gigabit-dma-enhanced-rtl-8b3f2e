# A bufferless, DMA-driven Gigabit Ethernet controller

Most small open Ethernet MACs are *buffered*. The processor copies a frame into a
dual-port frame memory inside the controller, the MAC sends it from there, and a received
frame waits in a second memory until the processor copies it out. Those memories have
three costs:

- They dominate the controller's area.
- They need true dual-port RAM, which not every technology offers.
- They cap the frame size. A 1536-byte buffer cannot take a 2048-byte payload.

This controller has no frame memory. An iDMA-style engine masters the system bus
(AXI4) and streams a frame straight from system memory into the MAC at line rate. In the
other direction it streams a received frame straight into memory. Only a few dozen bytes
are stored on the data path at any time:

- two 8-entry clock-domain-crossing FIFOs;
- a 32-byte realignment buffer in the DMA;
- a 5-byte delay line in the receiver.

Software describes a transfer in a register file and starts it. It learns of the
completion by polling or by interrupt.

```
            system clock (clk_i)                  | 125 MHz (clk_125_i)       | PHY
  AXI4  <-> iDMA --AXIS 64b--> TX CDC FIFO ---------> down-sizer -> MAC TX -> RGMII TX -> TXC/TXD/TX_CTL
  (mgr)        <--AXIS 64b--  RX CDC FIFO <--------- up-sizer  <- MAC RX <- RGMII RX <- RXC/RXD/RX_CTL
                                                  | receive clock (phy_rxc_i)
  reg bus -> eth_regs --(request)--> iDMA
                      --(RX_EN, synchronized)--> MAC RX
                      <-(status pulses, synchronized)-- MAC TX / MAC RX
```

The partitioning follows the published architecture of this controller:

- the iDMA as the AXI4 manager;
- transmit and receive CDC FIFOs next to the iDMA;
- a down-sizer and an up-sizer next to an RGMII MAC with AXI-Stream ports;
- one register bus for configuration.

The insides of every block, the register map and all widths and depths belong to this
implementation. The section *Where this implementation departs from or adds to the
original* lists those choices.

## Sending and receiving a frame

A transfer always has a source and a destination. Each is either the AXI4 port (a memory
address) or the AXI-Stream side (the MAC).

| operation | SRC | DST | PROTO | LENGTH |
|---|---|---|---|---|
| transmit | buffer address | — | src=0 (AXI), dst=1 (stream) | frame bytes |
| receive | — | buffer address | src=1 (stream), dst=0 (AXI) | buffer size (maximum frame) |
| memory copy | address | address | 0 / 0 | bytes |

**Transmit.** The buffer holds the complete frame without preamble or FCS: destination
MAC, source MAC, type/length and payload. There must be at least 60 bytes, because the
MAC does not pad. The MAC adds 7 preamble bytes and the SFD, then the frame, then the
CRC-32 FCS. After that it keeps a 12-cycle inter-frame gap. On the wire a frame of N
bytes takes exactly `8 + N + 4` cycles at 125 MHz. DONE is set when the last byte has
left the iDMA. The frame itself finishes on the wire a few cycles later, and TX_FRAMES
counts it then.

**Receive.** Set CTRL.RX_EN and start a transfer whose length is at least the largest
frame expected. The transfer ends at the frame's last byte. BYTES then holds the frame
length, without preamble and FCS. STATUS reports the result:

- RX_FRAME is set for a good frame.
- FRAME_ERR and FCS_ERR are set if the FCS was wrong or the PHY signalled an error. The
  bad frame is still written to memory.

Because nothing is buffered, a receive transfer must be armed before the frame arrives.
It must also not be displaced by a transmit. The iDMA runs one transfer at a time. A frame
that arrives with no receive transfer running fills the 8-entry RX FIFO, and its remaining
bytes are dropped (RX_OVERFLOW). This is the basic trade of the bufferless design:

- it saves the frame memories;
- in exchange, the software or a descriptor engine must keep a receive transfer posted;
- the memory system must deliver 125 MB/s while a frame is on the wire.

With a 64-bit bus that is one beat every 8 system cycles at a 125 MHz system clock.
A transmit whose memory falls behind cannot pause the frame. The MAC drives TX_ER for each
missing byte, which makes the PHY corrupt the frame on purpose, and STATUS.TX_UNDERRUN is
set.

## Register map (`eth_regs`)

The registers are 32 bits wide at byte offsets. Every access completes in the cycle it is
presented (`ready` is always 1).

| offset | name | access | bits |
|---|---|---|---|
| 0x00 | CTRL | RW | [0] RX_EN: MAC accepts frames; [1] IRQ_EN |
| 0x04 | STATUS | RO / W1C | [0] BUSY (RO); W1C: [1] DONE, [2] AXI_ERR, [3] FRAME_ERR, [4] FCS_ERR, [5] RX_OVERFLOW, [6] TX_UNDERRUN, [7] RX_FRAME |
| 0x08 / 0x0C | SRC_LO / SRC_HI | RW | source address |
| 0x10 / 0x14 | DST_LO / DST_HI | RW | destination address |
| 0x18 | LENGTH | RW | bytes to move |
| 0x1C | PROTO | RW | [1:0] source, [3:2] destination; 0 = AXI4, 1 = AXI-Stream |
| 0x20 | START | WO | write bit 0 = 1 to launch |
| 0x24 | BYTES | RO | bytes moved by the last transfer |
| 0x28 | RX_FRAMES | RO | good frames received |
| 0x2C | TX_FRAMES | RO | frames sent |

The bus returns `error` for:

- an unmapped address;
- a write to a read-only register;
- START while the iDMA is busy.

`irq_o = CTRL.IRQ_EN & STATUS.DONE`.

## The iDMA engine

The iDMA is the part that replaces the frame memories, and it has the most logic.
`idma_backend` accepts one request at a time and contains two stages.

### Legalizer (`idma_legalizer`)

The legalizer cuts a request of arbitrary address, alignment and length into *chunks*.
Each chunk is one legal AXI4 INCR burst on every side that is AXI:

- it crosses no 4 KiB page;
- it spans at most `MAX_BEATS` (256) 8-byte bus words.

The chunk is as large as those limits and the remaining length allow. A stream side has no
addresses. There, a chunk is only capped at 4 KiB so that its 13-bit byte count holds it.
One chunk leaves per cycle. A memory copy whose source and destination have different page
offsets gets chunks limited by both sides, so every chunk is legal for both bursts.

### Transport layer (`idma_transport`)

The transport layer does the data movement. Chunks are forked into a read queue and a
write queue, 4 deep each. So up to four AR and four AW bursts can be outstanding. All use
ID 0, so responses come back in order.

- **AXI read side.** The AR address is rounded down to the bus word. The burst length
  covers the chunk's byte span. For each R beat only the lanes the chunk covers are valid.
- **Stream read side** (receive). Each beat's `tkeep` lanes are valid.
- **Byte buffer** (`idma_byte_buffer`, 32 bytes). Valid lanes are appended in order. This
  is a byte queue, not a word queue. Any source alignment can therefore meet any
  destination alignment.
- **AXI write side.** Every W beat pops exactly the bytes that beat covers. They are placed
  at the destination lane offset with matching strobes. The first and last beats of a burst
  are partial. B responses are counted, and the transfer is done only when all are back.
- **Stream write side** (transmit). Full 8-byte beats are popped, packed from lane 0. The
  last beat of the transfer may be short and carries `tlast`. So one transfer is one
  Ethernet frame.

**Receive with an unknown frame length** is the subtle case. The transfer is programmed
with the buffer size. Its AW bursts may already have been issued for bytes that will never
arrive. When the source stream delivers `tlast`:

- the source is finished;
- the byte buffer is drained (partial pops are allowed);
- every remaining W beat of the bursts already issued is sent with all strobes low, so
  each AW still gets its W beats and memory past the frame is untouched.

BYTES reports the bytes actually taken from the stream. `tuser` on any received beat marks
a bad frame (FRAME_ERR). A non-OKAY AXI response sets AXI_ERR.

Timing: START to the first AR request takes a few system cycles. In the end-to-end test at
a 344 MHz system clock (the frequency the original was synthesized for), the first
preamble byte leaves 8 to 9 cycles of the 125 MHz clock after the START write.

## Crossing to the Ethernet clocks

There are three clock domains:

- `clk_i`, the system clock: iDMA, registers;
- `clk_125_i`, the transmit clock: down-sizer, MAC TX, RGMII TX, TXC;
- `phy_rxc_i`, the PHY's receive clock: MAC RX, up-sizer.

`rst_ni` is one asynchronous active-low reset. `rst_sync` synchronizes its release into
each domain.

`cdc_fifo_gray` is a dual-clock FIFO:

- each side keeps binary and Gray-coded pointers;
- each Gray pointer is passed to the other side through two flip-flops;
- storage is a register array.

Full and empty are conservative. A word becomes visible at the read side three read-clock
edges after it is written at the earliest. Both FIFOs sit on the iDMA side of the sizers,
as in the block diagram. So they carry 74-bit beats: 64 data bits, 8 keep bits, tlast and
tuser.

Control and status cross the domains separately:

- CTRL.RX_EN reaches the receive domain through a 2-flop synchronizer (`sync_2ff`).
- Status events reach the registers through toggle synchronizers (`sync_pulse`): frame
  sent, good frame, bad FCS, overflow and underrun. Two events of one kind are seen
  separately only if they are at least three destination cycles apart. The frame counters
  see at most one event per frame, so none is lost. Underrun and overflow pulses can come
  closer together; they may merge, which does not matter for a sticky flag.

## Width conversion

`axis_downsizer` holds one 64-bit beat and emits its kept bytes, lowest lane first, one
per 125 MHz cycle. The next beat is accepted in the cycle the last byte of the current one
leaves, so full beats produce bytes without gaps. Lanes with `tkeep` clear are skipped.
`tlast` goes on the last kept byte.

`axis_upsizer` does the reverse. It fills lanes 0 upwards and closes a beat at 8 bytes or
at `tlast`. The beat being filled and the beat waiting downstream are separate registers.
So the MAC's byte-per-cycle stream is never stalled as long as the FIFO takes one beat per
8 cycles. `tuser` of a beat is the OR of its bytes.

## MAC and RGMII

`eth_mac_tx` has five states: Idle, Preamble (8 cycles), Payload, FCS (4 cycles) and
Gap (12 cycles).

- The frame starts the cycle after a byte is offered in Idle.
- `s_ready` is high only during Payload.
- The CRC is the IEEE 802.3 CRC-32: reflected polynomial 0xEDB88320, initial value all
  ones, inverted, least significant byte first on the wire.
- A missing payload byte is an underrun: TX_ER is driven for that cycle, and the byte is
  still sent when it comes.

`eth_mac_rx` starts a frame on RX_DV with a preamble byte or the SFD, but only while
RX_EN is high.

- Bytes pass through a 5-byte delay line. When RX_DV falls, the byte leaving the line is
  known to be the last one before the FCS, and it gets `tlast`. So the FCS never reaches
  memory.
- The CRC runs over data and FCS together. A good frame leaves the residue 0xDEBB20E3.
- `tuser` marks a bad FCS or any RX_ER seen during the frame.
- A PHY cannot be paused. A byte the stream does not accept is dropped, and an overflow
  pulse is raised.

`rgmii_phy_if` turns the 8-bit, 125 MHz bus into RGMII's 4-bit double data rate.

Transmit:

- bits [3:0] are driven while TXC is high, bits [7:4] while it is low;
- TX_CTL carries TX_EN in the high phase and TX_EN XOR TX_ER in the low phase;
- each half-cycle is driven from its own flop: the high nibble is re-registered on the
  falling edge, and a clock-selected multiplexer picks the nibble;
- TXC is the 125 MHz clock itself, not shifted. The PHY must add the 2 ns clock delay
  (RGMII-ID). On an FPGA or ASIC, replace the flop-plus-multiplexer with the technology's
  DDR output cell.

Receive:

- the low nibble and RX_DV are sampled on the rising edge of RXC;
- the high nibble and RX_DV XOR RX_ER are sampled on the falling edge;
- the byte appears one receive cycle later.

`eth_rgmii` groups the MAC TX, the MAC RX and the pin interface. It is the block that faces
the PHY.

## Parameters and widths

| where | parameter | default | note |
|---|---|---|---|
| `eth_idma_top` | `TX_FIFO_DEPTH`, `RX_FIFO_DEPTH` | 8 | power of two |
| `eth_idma_top`, `idma_backend`, `idma_legalizer` | `MAX_BEATS` | 256 | AXI4 INCR limit |
| `eth_pkg` | AXI data / address / ID | 64 / 64 / 4 bits | localparams |
| `eth_pkg` | transfer length | 32 bits | |
| `eth_pkg` | register bus | 32-bit address and data, byte strobes | |

The package holds all shared structs: AXI4 request and response, AXI-Stream wide and byte
beats, register bus, and DMA request and response. The sizers, the byte buffer and the transport
layer are written in terms of `AxiStrbWidth`, so the package data width is meant to be
changeable to 32 or 128 bits. Only 64 bits has been simulated.

## Where this implementation departs from or adds to the original

- **The MAC is new.** The original reuses an existing open-source RGMII MAC, which is not
  described. The MAC here is written from IEEE 802.3 and the RGMII specification. It does
  not pad short frames, filter addresses or implement pause frames.
- **The iDMA is reduced.** The original extends a full-featured open DMA engine. This one
  keeps the two described stages, a request legalizer and a transport layer for AXI4 and
  AXI-Stream, and leaves out:
  - multi-dimensional transfers;
  - request queues;
  - several transfers in flight;
  - error handling beyond a status flag.
- **Receive-transfer handling is this design's.** Ending a receive transfer early at the
  frame end, and the zero-strobe W beats, are not described in the original.
- **FIFO placement and depth.** The block diagram places both CDC FIFOs between the iDMA
  and a sizer, and this implementation follows it. The depths are not published. The
  original's area numbers show a much larger transmit FIFO (2279 µm²) than receive FIFO
  (613 µm²), but both are 8 deep here.
- **A third clock.** The receive path runs on the PHY's receive clock. The original speaks
  only of a 125 MHz Ethernet clock and the system clock.
- **Area and timing are not reproduced.** The original reports an area for the bufferless
  controller in a 22 nm process, about 7,750 µm², roughly 88% below the buffered design.
  It also measures cycle counts on an FPGA prototype. Neither can be reproduced here.
  - The preamble-plus-FCS overhead of 12 cycles per frame matches the original's
    measurements exactly.
  - The payload takes one cycle per byte in both.
  - The original's configuration phase (about 110 cycles) is driven by software on its
    host, so it is not comparable with the 8 to 9 cycles from START to preamble measured here.

  Transmit cycle counts at 125 MHz, original prototype against this RTL in simulation:

  | payload | original: configuration / preamble + payload + CRC / total | this RTL: START to preamble / preamble + payload + CRC |
  |---|---|---|
  | 256 B | 109 / 268 / 377 | 8 / 268 |
  | 512 B | 116 / 524 / 640 | 9 / 524 |
  | 1024 B | 107 / 1036 / 1143 | 9 / 1036 |
  | 2048 B | not run: the buffered baseline refused it | 9 / 2060 |
- **Not included:** the system crossbar and the PHY chip. The AXI4 manager port and the
  RGMII pins are top-level ports.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. Each has a cycle watchdog and uses only `$urandom` for
stimulus.

| testbench | what it establishes |
|---|---|
| `tb_idma_legalizer` | 300 random requests against a reference splitter (`MAX_BEATS` = 16 to hit the beat limit as well as 4 KiB) |
| `tb_idma_transport` | 150 random transfers, all kinds and alignments, with chunks made deliberately small and irregular |
| `tb_idma_backend` | the same kinds through the legalizer; AXI rule checks in the memory model |
| `tb_cdc_fifo_gray` | 2000 words across unrelated clocks, order and completeness, full at exactly DEPTH |
| `tb_axis_downsizer`, `tb_axis_upsizer` | byte order, keep and last handling, no bubbles at line rate, random backpressure |
| `tb_eth_mac_tx`, `tb_eth_mac_rx` | frame format and exact phase lengths against a textbook CRC-32, underrun, bad FCS, RX_ER, overflow, RX_EN gating |
| `tb_rgmii_phy_if` | nibble order and TX_CTL/RX_CTL encoding on both edges |
| `tb_eth_rgmii` | MAC + RGMII in loopback, frames of 60–400 bytes |
| `tb_eth_regs` | every register, W1C, error responses, interrupt |
| `tb_eth_idma_top` | the whole controller at default parameters |

`tb_eth_idma_top` plays the system and the PHY. It runs:

- transmits of 256, 512, 1024 and 2048 bytes from unaligned buffers, some across 4 KiB.
  Each frame is decoded from the RGMII pins, compared byte for byte, FCS-checked, and
  timed as 8 + N + 4 cycles;
- receives of 256 to 2048-byte frames into 2048-byte transfers;
- a bad-FCS frame;
- an unaligned memory copy;
- a zero-length transfer;
- an underrun forced by a 97%-stalled memory;
- an overflow from a frame with no receive transfer.

It counts each of these mechanisms, plus:

- 4 KiB splits;
- partial-word realignment;
- CDC FIFO backpressure;
- AXI stalls.

A mechanism that never occurs is a failure. The test takes a few seconds.

To run one with Verilator 5:

```
verilator --binary --timing --assert --top-module tb_eth_idma_top \
  -y rtl -y tb +libext+.sv -Irtl rtl/eth_pkg.sv tb/tb_eth_util.sv tb/tb_eth_idma_top.sv
./obj_dir/Vtb_eth_idma_top
```

Replace the top module and file for the other testbenches. `axi_mem_model.sv` in `tb/` is
the behavioural AXI4 memory that several of them use. Verilator has two-state logic and
randomizes uninitialized state. Every control flop in `rtl/` has a reset. The data arrays of the
FIFOs and of the byte buffer do not: they are never read before they are written. The
testbenches pass with `+verilator+rand+reset+2`.

The remaining lint messages are width extensions, unused struct fields and package
constants, and `rst_sync`/`cdc_fifo_gray` flops that are both reset asynchronously and fed
synchronously. The last of these is inherent to a reset synchronizer.
