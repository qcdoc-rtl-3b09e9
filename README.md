# QCDOC node logic: nearest-neighbour communications and embedded-memory streaming

QCDOC ("QCD on a chip") is a massively parallel computer for lattice QCD in
which every processing node is one chip: a 32-bit PowerPC 440 core with a
1 Gflops double-precision FPU, 4 MByte of embedded DRAM (EDRAM), twelve
bidirectional serial links to neighbouring nodes in a six-dimensional mesh,
a DDR SDRAM controller and an Ethernet controller. Lattice QCD needs high memory
bandwidth and fast, low-latency nearest-neighbour traffic, but no general
network. The node therefore spends
its custom logic on two things:

* an **EDRAM controller** that turns the 1024-bit-wide embedded DRAM into a
  stream of 128-bit beats at one beat per clock (8 GByte/s at 500 MHz) for
  sequential access, with the DRAM row (page) changes hidden and single bit
  errors corrected; and
* a **serial communications unit (SCU)** that moves 64-bit words to and from
  the twelve neighbours by DMA, with per-word acknowledgement, error
  detection and automatic retry, plus a separate low-volume supervisor
  channel for the operating system.

This repository holds synthesizable SystemVerilog for those two units and a
top level that joins them. The processor core, FPU, buses, DDR and Ethernet
controllers, serial macros and PLL are library parts of the chip vendor; they
are not here, and their connection points are ports of the top.

## Block map

```
                 core port (line reads, beat writes)
                          |
  EDRAM macro  <==1024==> edram_ctrl <---- 128-bit bus port ----+
  (port out)    +128 ECC  (2 row buffers,                      |
                           next-row prefetch, SEC-DED)         |
                                                                |
  serial macros <==bytes==> scu  -------------------------------+
  (12 links,                 |-- 12 x scu_link  (protocol engine, 4 receive buffers)
   ports out)                |-- 24 x scu_dma   (one per send / receive wire)
                             |-- register port, supervisor registers, interrupts
                             `-- round-robin memory port, up to 8 reads in flight
```

| file | what it is |
|---|---|
| `rtl/qcdoc_pkg.sv` | shared sizes, the frame header type, the header code and parity functions, the DMA instruction type, the EDRAM error code |
| `rtl/scu_link.sv` | one link end: framing, 4 receive buffers, ACK/NACK, retry, header correction |
| `rtl/scu_dma.sv` | one DMA channel running chained block-strided instructions |
| `rtl/scu.sv` | the SCU: 12 links, 24 channels, registers, memory arbitration |
| `rtl/edram_ctrl.sv` | EDRAM controller |
| `rtl/qcdoc_node.sv` | top: SCU + EDRAM controller |
| `tb/edram_model.sv` | behavioural model of the EDRAM macro (simulation only) |
| `tb/tb_*.sv` | self-checking testbenches |

Everything runs on one clock (nominally the 500 MHz core clock). The serial
macros pace each link with a byte strobe: at 500 Mbit/s per link a byte comes
every 8 core cycles.

## The link protocol

This is the part that takes the most care, because the two ends of a link
only see each other through a byte stream in each direction, and the data
stream of one direction shares its wire with the acknowledgements of the
other.

### Receive buffers and acknowledgement

Each receiving end has **four word buffers, each acknowledged on its own**,
so the sender can have four words in flight without waiting for a round trip.
Buffers 0-2 carry the DMA data stream; buffer 3 is the **supervisor buffer**,
written and read directly by the processor through registers and announced by
an interrupt. Rules:

1. A word is acknowledged (ACK) only when it has left its buffer (taken by
   the receive DMA, or released by the processor for buffer 3). An ACK
   therefore always means "this buffer is free again", and nothing can be
   overrun.
2. A word whose parity check fails is discarded and answered at once with
   a NACK ("acknowledgement with error") naming its buffer. The sender still
   holds a copy of every unacknowledged word and sends it again into the same
   buffer.
3. Data words go to buffers 0, 1, 2, 0, 1, ... and the receiver hands them to
   its DMA in that same order. A resent word thus fills the gap it left, and
   the words behind it wait in their buffers: the stream stays in order even
   with retries, without sequence numbers.

The sender keeps per buffer a busy flag, a copy of the word and a
resend-pending flag. When a symbol boundary comes up it picks, in this order:
a NACK owed to the neighbour, an ACK owed, a word to resend, a new supervisor
word (if buffer 3 is free), a new data word (if the next data buffer in turn
is free), or idle.

### Frame format

All traffic is in 16-bit symbols, sent low byte first. The all-zero symbol is
idle.

| symbol | contents |
|---|---|
| header | `[7:6]` type (1 data, 2 ACK, 3 NACK), `[5:4]` buffer, `[3:0]` zero; `[11:8]` Hamming check bits; `[15:12]` zero |
| payload 0-3 | word bits 15:0, 31:16, 47:32, 63:48 (data frames only) |
| parity | `[0]` even parity of word bits 31:0, `[1]` of bits 63:32 (data frames only) |

A data frame is 6 symbols (12 bytes), an ACK or NACK one symbol (2 bytes).

* The 8 header bits say what the frame is, so they are protected by a
  Hamming(12,8) code: check bit *i* covers the codeword positions whose
  number has bit *i* set, with data bits at positions 3, 5, 6, 7, 9, 10, 11,
  12. The syndrome is the position of a single flipped bit, which is then
  corrected (counted on `hdr_fixed`). A single bit error on an idle symbol
  decodes back to idle, because every valid header is at least 3 bits away
  from zero.
* The 64 data bits are protected by one parity bit per 32-bit half, which
  detects any single bit error in either half. A detected error leads to a
  NACK and a resend.
* Not covered: two errors in one header symbol, or a lost byte. Both ends
  must leave reset on a symbol boundary (the serial macros' own byte
  alignment is outside this logic).

Throughput: 8 payload bytes per 12 link bytes. With three data buffers and a
short wire delay the sender never waits for an ACK on a clean link; the
link testbench checks that 100 words take 12 byte times each, plus start-up.

## SCU DMA and registers

Each of the 24 wires (12 send, 12 receive) has its own DMA channel. A
channel runs a chain of **block-strided move instructions** held in 4
instruction registers:

| field | meaning |
|---|---|
| `base` | 64-bit word address of the first block |
| `blk_len` | words per block (0 treated as 1) |
| `nblk` | number of blocks (0 treated as 1) |
| `stride` | words from the start of one block to the start of the next |
| `next`, `last` | instruction to continue with, unless `last` |

A send channel reads words and passes them to its link; a receive channel
writes what its link delivers. Each channel has at most one memory access in
flight; the SCU's round-robin arbiter grants one channel per cycle and keeps
up to 8 reads outstanding, returning the data in order. 64-bit words travel
in 128-bit bus beats with byte enables.

Register port (`cfg_addr[11:10]` selects the group; reads are combinational):

| group | address bits | write | read |
|---|---|---|---|
| 0 | `[9:5]` channel, `[4:3]` instruction, `[2:0]` field 0-4 | fields 0-3 (base, blk_len, nblk, stride) are staged; field 4 = `{last, next}` stores the whole instruction | - |
| 1 | `[4:0]` channel | start the chain at instruction `wdata[1:0]` | `{done, busy}` |
| 2, `[4]`=0 | `[3:0]` link | send a supervisor word | received supervisor word |
| 2, `[4]`=1 | `[3:0]` link | release the received supervisor word (this ACKs it) | `{tx_pending, rx_full}` |

Channels 0-11 send on links 0-11, channels 12-23 receive from links 0-11.
`irq_done[c]` stays high from the end of channel c's chain to its next start;
`irq_sup[l]` stays high while a supervisor word waits on link l.

## EDRAM controller

The EDRAM is read and written one 1024-bit row at a time (32768 rows for
4 MByte); the core wants 256-bit cache lines as two 128-bit beats.

* **Row buffers.** Two 1024-bit buffers hold recently read rows. A line read
  that hits a buffer is granted at once; its two beats come out on the next
  two cycles. A new line can be granted in the cycle of the previous line's
  last beat, so hits stream at one beat per cycle with no gap.
* **Prefetch.** Whenever the buffer in use holds row *r* and the other does
  not hold *r+1*, the controller reads row *r+1* into the other buffer. The
  decision uses the buffer of the current cycle's grant, so the fetch of the
  next row starts in the same cycle the stream enters a row. A row holds 8
  beats, so any row access of up to 7 cycles is hidden; a sequential stream
  then pays the row latency once, at its start.
* **Misses.** A line that hits neither buffer waits while its row is fetched
  into the buffer not used last.
* **Writes.** Core beat writes and bus-side writes go straight to the EDRAM
  in whole 64-bit words (see error correction below). They are also merged
  into any buffer holding that row, so the buffers never go stale. Bus-side reads are single 128-bit beats taken from
  the EDRAM.
* **Arbitration.** One EDRAM access at a time, in the order: core demand
  miss, core write, bus-side access, prefetch.

### Error correction

Each 64-bit word in the EDRAM has 8 check bits (128 per row, on the separate
`e_wcheck` / `e_rcheck` buses) of a SEC-DED (72,64) code:

* Check bits 0-6 form a Hamming code. Think of a 71-bit codeword. Check
  bit *i* sits at position 2^i. The 64 data bits fill the other positions in
  increasing order. Check bit *i* is the XOR of all data bits whose position
  has bit *i* set.
* Check bit 7 makes all 72 bits even parity.
* On a read, the controller computes the syndrome: the recomputed check
  bits 0-6 XOR the stored ones.
  * Odd overall parity means one bit is wrong. The syndrome gives its
    position, and that bit is flipped back (`ev_ecc_fix`).
  * Even parity with a nonzero syndrome means two bits are wrong. This is
    reported on `ev_ecc_err`; the data are passed on as read.

Every row read is corrected on its way in: row buffer fills, bus-side reads
and the reads described below. Corrected words are not written back; a
later write of the word refreshes its check bits.

The check bits cover whole words, so the EDRAM is written in whole 64-bit
words only. A write whose byte enables cover only part of a word must first
get the rest of that word. It comes from a row buffer if one holds the row.
Otherwise the controller reads the row first; it then does the write, with
the old bytes filled in and fresh check bits. This read-modify-write costs
one extra EDRAM access. The SCU always writes whole 64-bit words and never
needs it.

The EDRAM macro port is a request/grant handshake; read data come back on
`e_rvalid` any number of cycles later. The streaming rate needs the row
access to take under 8 cycles; the test model takes 7 (data 7 cycles after the grant, next grant
in the same cycle).

## Top level

`qcdoc_node` instantiates `scu` and `edram_ctrl` and wires the SCU's bus port
straight to the controller's bus-side port, as a processor local bus with a
single master would. The other parts of the chip attach at the top's ports:
the core port (`c_*`), the EDRAM macro (`e_*`), the serial macros (`tx_*`,
`rx_*`), the register port and interrupts (`cfg_*`, `irq_*`). `ev_*` outputs
are event pulses for monitoring. Parameters: `ROWS` (default 32768 = 4 MByte)
and `NL` (default 12 links).

## What follows the source and what is this design's own

Taken from the published QCDOC description: the block split (EDRAM
controller and SCU are the custom parts); 64-bit transfers; four receive
buffers per link, three for DMA data and one supervisor buffer loaded and
unloaded by the processor with an interrupt; acknowledgement only after a
word leaves its buffer; "acknowledge with error" causing a retry; correction
of single errors in the 8 identifying bits and detection of single errors
within 32 bits; one DMA unit per wire (24) programmed with chained
block-strided instructions; 12 links; the 1024-bit EDRAM bus, 256-bit lines,
128-bit beats at one per cycle for sequential access; 4 MByte.

This design's own choices: the frame format and both codes; in-order use of
the three data buffers; frame priorities; the instruction fields and the
number of instructions per channel; the register map; the memory port
handshakes and arbitration; two row buffers and next-row prefetch; write
through; the EDRAM error code and read-modify-write; a single clock with
byte strobes.

Known departures and gaps:

* **EDRAM error code is an assumption.** The real bus carries extra bits for
  error correction and detection, but their code and count are not
  published; the SEC-DED code per 64-bit word is a common choice, not the
  original.
* **No separate clock domains.** The real chip runs its bus at a third of the
  core clock and the links from their own serial clock.
* **No bus model.** The SCU talks to the EDRAM controller point to point; on
  the chip both sit on a shared bus with the core, the DDR controller and
  the Ethernet DMA.
* The general "DMA Controller" next to the EDRAM controller on the chip's
  block diagram is not described anywhere and is not built.

## Machine configurations

* A six-dimensional torus (for example an 8,192-node 2^3 x 8^2 x 16 machine)
  needs 12 links per node: `NL` = 12.
* Four-dimensional partitions of that machine use 8 of the 12 links; which
  ones is a matter of cabling and software, not of this logic.
* A 24^3 x 32 lattice on a 2 x 12 x 12 x 16 partition puts 96 sites on a
  node. At roughly 1.7 KByte per site for gauge field plus solver vectors
  (a typical figure, not a published one) that is about 170 KByte, well inside
  the 4 MByte EDRAM.

## Verification

Every testbench checks its results against values it works out itself, ends
with a line `TB_RESULT checks=N failures=M`, and has a watchdog.

| testbench | what it does |
|---|---|
| `tb_scu_link` | two link ends back to back: clean stream and its rate (12 byte times per word), flow control (exactly 3 words into a stalled receiver), supervisor words both ways, then 300 words each way with random single-bit errors (NACKs, retries and corrected headers must all occur, no word lost or reordered) |
| `tb_scu_dma` | a send and a receive channel on a chain of three instructions; address sequence and data checked word by word; restart |
| `tb_scu` | the full SCU, links looped in pairs, byte strobe every 8 cycles: a strided transfer on all 12 links at once, every word checked, supervisor word with interrupt and release |
| `tb_edram_ctrl` | full-size controller on the EDRAM model: 256-line sequential stream must take exactly 512 cycles for 512 beats; then 3000 random line reads mixed with random core and bus-side writes and reads over four rows (many of them partial-word, so read-modify-write), checked against a shadow copy; then injected single data and check bit errors that must be corrected on core reads, bus reads and inside a read-modify-write, and a double error that must be reported |
| `tb_qcdoc_node` | two full-size nodes joined in all six directions: core writes, a chained DMA exchange on all 24 wires of both nodes with late receivers and bit errors, read-back of all received data through the core ports, supervisor word, a partial-word core write; counts each mechanism (hit, miss, prefetch, core stall, chaining, sender stall on full buffers, NACK/retry, header fix, supervisor interrupt, EDRAM error correction, read-modify-write) and fails if one never happened |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/qcdoc_pkg.sv tb/tb_qcdoc_node.sv --top-module tb_qcdoc_node
./obj_dir/Vtb_qcdoc_node
```

Use `+verilator+rand+reset+2` to start undriven state at random values.
All testbenches run in well under a minute; `tb_qcdoc_node` uses the default
(full) sizes.
