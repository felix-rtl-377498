# FELIX card firmware in SystemVerilog

FELIX sits between the detector front ends of a particle-physics experiment
and ordinary servers. Front-end electronics talk over many custom serial
links. FELIX collects the data arriving on those links and writes it into
host memory over PCIe, where software forwards it onto a commodity network.
In the other direction it carries configuration data from the host to the
front ends. It also passes on the experiment's timing, trigger and control
(TTC) signals: trigger accepts and bunch/event counter resets.

This RTL models the FPGA logic of one FELIX PCIe card in its GBT
configuration:

- 24 GBT links at 4.8 Gb/s;
- each link split into 8 E-links of 320 Mb/s;
- a DMA engine ("Wupper") per PCIe endpoint;
- a TTC decoder;
- a BUSY output.

Everything that the PCIe hard block, the transceivers and the clocking chips
would do lies outside this RTL. Their signals are ports of the top module.

## Structure

```
                      ttc_bit ──► ttc_decoder ──► l1a/bcr/ecr/brcst ──┐
                                                                      │
 gbt_rx_word[24] ─┐   felix_top                                       ▼
                  ├─► felix_set 0 (links 0..11)  ◄── PCIe streams, registers, MSI (set 0)
                  └─► felix_set 1 (links 12..23) ◄── PCIe streams, registers, MSI (set 1)
                          │ ToHost FIFO levels
                          ▼
                      busy_ctrl ──► busy_out

 felix_set:
   rx word ─► gbt_rx ─► central_router.to-host ─► ToHost FIFO ─► wupper ─► rq (writes)
   tx word ◄─ gbt_tx ◄─ central_router.fan-out ◄─ from-host ◄─ FromHost FIFO ◄─ wupper ◄─ rc
                              ▲ TTC byte
```

The card has two identical *sets*, one per 8-lane PCIe endpoint. Each set
holds:

- 12 links, each with a GBT transmitter, a GBT receiver and a PRBS-31
  checker;
- a Central Router;
- two 256-bit FIFOs, 512 words each;
- a Wupper DMA engine with its register file.

The TTC decoder, the frame-slot counter and the BUSY logic are shared by
both sets.

| file | role |
|---|---|
| `felix_pkg.sv` | block, header and GBT constants; scrambler and check functions |
| `felix_top.sv` | the card: frame counter, TTC decoder, two sets, BUSY |
| `felix_set.sv` | one set: links, Central Router, FIFOs, DMA engine, monitors |
| `gbt_tx.sv`, `gbt_rx.sv` | GBT frame build/scramble/gearbox and the reverse |
| `prbs31_checker.sv` | self-seeding PRBS-31 checker for link tests |
| `central_router.sv` | splits frames into E-links and wraps the three parts below |
| `elink_tohost.sv`, `cr_tohost.sv` | per-E-link block packer and the arbiter into the ToHost FIFO |
| `cr_fromhost.sv` | distributes FromHost FIFO blocks to E-link byte streams |
| `ttc_fanout.sv` | TTC byte and the per-link TTC/from-host multiplexer |
| `sync_fifo.sv` | 256-bit fall-through FIFO |
| `wupper.sv` | DMA engine: `wupper_regs`, `wupper_dma_control`, `wupper_dma_read_write`, `wupper_interrupt` |
| `busy_ctrl.sv` | BUSY with hysteresis on the ToHost FIFO levels |

## One clock, frame slots

All logic runs on one 240 MHz clock. A GBT frame is 120 bits, sent 40 million
times a second. The transceiver interface is therefore 20 bits wide: one word
per clock, six words per frame.

`felix_top` counts cycles modulo `FRAME_DIV` = 6 and produces `frame_stb` in
the last cycle of each frame slot. The following blocks use it as their
40 MHz tick:

- every GBT transmitter;
- the from-host byte sequencers;
- the TTC fan-out.

The received side has its own frame timing, recovered by each `gbt_rx`.

## GBT link

Frame layout, least significant bit first on the wire:

| bits | field |
|---|---|
| 3:0 | header: `0101` data, `0110` idle |
| 5:4 | IC (scrambled) |
| 7:6 | EC (scrambled) |
| 87:8 | 80-bit data field (scrambled) |
| 119:88 | trailer |

- **Scrambler.** The 84 bits of IC, EC and data are scrambled as four 21-bit
  lanes with the self-synchronising polynomial x^21 + x^19 + 1. Each lane
  continues from the same lane of the previous frame. The receiver
  descrambles from the received bits alone, so it needs no seed and
  recovers after one frame.
- **Trailer, frame mode.** The trailer carries one 8-bit check word per
  scrambled lane: the XOR of the lane's three bytes. The receiver
  recomputes the check words and counts mismatches (`check_errors`). This
  detects errors but does not correct them. The real link uses a
  Reed-Solomon code here, which is not built.
- **Trailer, wide-bus mode.** The trailer carries 32 more user bits,
  scrambled. This gives up error protection for payload. The mode is chosen
  per link (register `0x33`) and applies to the receive (to-host) direction
  only; the transmit direction always keeps its check words. The 32 extra
  received bits are not routed to E-links.
- **Receiver lock.** The receiver shifts words into a 120-bit window and
  looks at the header at its current frame phase.
  - While unlocked, a bad header makes it hold its word counter for one
    extra cycle. This "word slip" moves the phase by one word.
  - After 8 good headers in a row it is locked. While locked it keeps the
    phase.
  - It drops lock after 4 bad headers in a row.
  - A frame is delivered one cycle after its last word, with `frame_stb`.

## E-links and blocks (to-host)

E-link *e* of a link is byte *e* of the 80-bit data field: bits
`[8e+7:8e]`. That gives 8 bits per 40 MHz frame, or 320 Mb/s. E-link
numbers are global: `(set*12 + link)*8 + e`.

A received frame with a data header, on a locked link that is enabled in
register `0x31`, gives one byte to each of that link's 8 packers
(`elink_tohost`).

- **Chunks.** A packer cuts its byte stream into chunks of `chunk_size`
  bytes (register `0x30`, default 40). It packs the chunks into 256-bit
  blocks.
- **Block layout.** Each block has a 32-bit header, then up to 28 payload
  bytes. Byte *k* of the payload is in bits `[32+8k +: 8]`. The header
  fields, MSB first:

  | bits | field |
  |---|---|
  | 31:24 | marker `0xAB` |
  | 23:13 | E-link number |
  | 12:8 | sequence number of the block on this E-link |
  | 7 | end of chunk |
  | 6:2 | payload byte count |
  | 1:0 | zero |

  A 40-byte chunk therefore becomes a 28-byte block followed by a 12-byte
  block with the end-of-chunk flag set. Host software rebuilds chunks from
  these two fields and the sequence number.
- **Arbitration.** `cr_tohost` moves one block per clock into the ToHost
  FIFO, picking among the packers round robin. The FIFO can take 256 bits
  at 240 MHz, about 61 Gb/s. All 96 E-links of a set deliver
  96 x 320 Mb/s = 30.7 Gb/s of payload, plus about 14% header overhead.
  The FIFO path therefore has about 1.7x headroom.
- **Overflow.** Each packer has a two-entry output queue. This absorbs the
  moment when all E-links close a block in the same cycle. If the FIFO
  stays full long enough that a packer closes a block while its queue is
  full, the block is dropped and `overflows` counts it. The sequence number
  still advances, so the host sees the gap.

## From-host path and TTC forwarding

The host writes blocks of the same format into a from-host DMA buffer.
`cr_fromhost` reads them from the FromHost FIFO. Each E-link has a one-block
buffer.

- A block for an E-link whose buffer is empty is copied in and popped.
- A block for a busy E-link waits at the FIFO head. Blocks for one E-link
  therefore stay in order, at the cost of head-of-line blocking.
- The following blocks are dropped and counted in `fh_errors`: a bad
  marker, a byte count of 0 or more than 28, or an E-link number outside
  the set.
- Each E-link sends one byte per frame. An E-link with nothing to send
  sends zero.

`ttc_fanout` builds one TTC byte per frame from the decoder's pulses seen
during the previous frame slot: `{l1a, bcr, ecr, brcst_valid, brcst[5:2]}`.
On links whose bit is set in register `0x32`, this byte replaces E-link 0 of
the transmit field. The link sends a data header whenever any of its bytes
is non-zero.

## TTC decoder

The TTC input is a serial stream. Bits alternate between two channels:

- **A channel:** the trigger accept (L1A).
- **B channel:** an idle line at 1, carrying framed commands.

The decoder treats the first bit after reset as an A bit. Each A bit
becomes an `l1a` pulse.

B-channel frames:

- **Short frame:** `0` start, `0` format, 8 command bits MSB first, 5 check
  bits, `1` stop. It produces `brcst`/`brcst_valid`. Command bit 0 is BCR
  and bit 1 is ECR.
- **Long frame:** a format bit of 1. The decoder skips it.
- **Bad stop bit:** counted in `frame_errors`.

## Wupper DMA engine

The engine moves data between the two FIFOs and host memory. Host memory is
reached through a request stream (`rq_*`) and a completion stream (`rc_*`)
of 256-bit beats with valid/ready/last handshakes.

**Descriptors.** There are 8 descriptors. Each one holds:

- a buffer [start, end) in host memory;
- a direction;
- the number of 256-bit words per PCIe request;
- a circular ("wrap") bit.

Enabling a descriptor starts it at `start`. The engine issues one request
at a time and picks among the ready descriptors round robin. A circular
to-host stream and a from-host transfer can therefore run together.

**When a descriptor is ready:**

- **To-host:** the ToHost FIFO holds a full request. In circular mode the
  request must also fit before the host pointer: the address up to which
  software has consumed the buffer, written to field 3. One word always
  stays free, so that "full" and "empty" can be told apart.
- **From-host:** the FromHost FIFO has room. In circular mode the host
  pointer must also be at least a request ahead. Here it marks how far
  software has filled the buffer.

If a to-host descriptor is held back only by the host pointer, the engine
counts a full stall (monitor 9).

**Buffer end.** When a descriptor reaches `end`:

- a circular descriptor wraps to `start`;
- a single-pass one is marked done and disabled.

Either way, an interrupt event is raised on the descriptor's vector. The
last request of a pass is shortened if fewer words than a full request
remain.

**Request and completion formats.** These are a simplification, not the
PCIe core's own descriptor layout.

- A request starts with a header beat: address in bits 63:0, length in
  words in 83:64, type (0 read, 1 write) in 87:84, tag in 95:88.
- Write data beats follow the header; the last carries `rq_last`.
- A completion starts with a header beat: status in 19:0 (0 = success),
  length in 39:20, tag in 47:40. Its data beats follow.
- The engine checks length, tag and status, and checks that `rc_last`
  falls on the announced length.
- A completion that fails these checks is dropped and counted in
  `len_errors`.

**Interrupts.** Pending events are masked by register `0x22` (reset: all
enabled). They are issued lowest vector first as `msi_valid`/`msi_vec`, and
each is held until `msi_ack`.

**Register map** (64-bit registers, word addresses; a read answers one clock
later):

| address | register |
|---|---|
| `0x00 + 4d + 0` | descriptor *d* start address |
| `0x00 + 4d + 1` | descriptor *d* end address |
| `0x00 + 4d + 2` | control: `wrap[9]`, `from_host[8]`, `words_per_request[7:0]` |
| `0x00 + 4d + 3` | write: host pointer; read: current address |
| `0x20` | write 1s to enable descriptors; read: enabled mask |
| `0x21` | done mask |
| `0x22` | interrupt mask |
| `0x30` | chunk size (reset 40) |
| `0x31` | per-link receive enable (reset all 1) |
| `0x32` | per-link TTC forwarding select |
| `0x33` | per-link wide-bus mode |
| `0x40..0x4F` | monitors, listed below |

Monitors 0–7 (from the set):

| monitor | meaning |
|---|---|
| 0 | block overflows |
| 1 | from-host block errors |
| 2 | frames that carried TTC |
| 3 | GBT locked mask |
| 4 | GBT check errors |
| 5 | PRBS bit errors |
| 6 | PRBS locked mask |
| 7 | cycles the ToHost FIFO was full |

Monitors 8–14 (from the DMA engine):

| monitor | meaning |
|---|---|
| 8 | completion length errors |
| 9 | full stalls |
| 10 | interrupts sent |
| 11 | words to host |
| 12 | words from host |
| 13 | ToHost FIFO level |
| 14 | FromHost FIFO level |

## BUSY

`busy_out` rises when either set's ToHost FIFO reaches 3/4 of its depth. It
falls when both FIFOs are below 1/2. The `busy_force` input also raises it.
`busy_asserts` counts rising edges. BUSY asks the trigger system to pause
before data has to be dropped.

## Parameters

| parameter | default | where |
|---|---|---|
| `NUM_SETS` | 2 | `felix_top`: one set per PCIe endpoint |
| `LINKS_PER_SET` | 12 | `felix_top`: 24 GBT links per card |
| `ELINKS_PER_LINK` | 8 | `felix_top`: 192 E-links per card |
| `FRAME_DIV` | 6 | `felix_top`: clock cycles per 40 MHz frame (240 MHz) |
| `FIFO_DEPTH` | 512 | `felix_top`/`felix_set`: words in each 256-bit FIFO (own choice) |
| `NUM_DESC` | 8 | `wupper`: DMA descriptors |
| `LOCK_COUNT` | 8 | `gbt_rx`: good headers before lock (own choice) |

The structure follows the published FELIX firmware: two sets, GBT wrapper,
Central Router with to-host, from-host and TTC fan-out parts, Wupper with
descriptor control, header insertion and stripping, an interrupt controller
and registers, a TTC decoder and BUSY. The rates also follow it: 240 MHz,
4.8 Gb/s links, 8 E-links per link, 256-bit FIFOs, 8 descriptors. Every bit
layout, handshake, arbitration rule, threshold and register address
described above is this design's own choice.

## Departures and limits

- **FEC not built.** The GBT forward error correction (Reed-Solomon) is not
  built; a per-lane check word only detects errors.
- **One clock.** The real engine runs at 250 MHz, in its own domain, with
  FIFOs that cross clocks. Here everything is on one 240 MHz clock.
- **Fixed E-link width.** E-links are fixed at 8 bits (320 Mb/s). The
  narrower 2- and 4-bit E-links are not built.
- **Direct mode only.** E-link data is taken as raw bytes, with no 8b/10b
  or HDLC decoding. Chunks are cut at a fixed length, not at markers in the
  data.
- **Not built:**
  - the FULL-mode link (9.6 Gb/s, its own framing);
  - the PCIe endpoint;
  - the transceivers;
  - clock generation;
  - housekeeping.

  The PRBS-31 checker is built; it checks the raw receive words.
- **Wide-bus bits unused.** The 32 extra wide-bus bits are received but
  not routed to E-links. The set sends IC/EC as `11` and does not use the
  received IC/EC bits.
- **One read at a time.** The DMA engine has one read request outstanding
  at a time, which limits from-host bandwidth to one round trip per
  request.

## Simulating

The testbenches are in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<m>`. A plain Verilator run:

```
verilator --binary --timing --assert -Irtl -Itb rtl/felix_pkg.sv rtl/*.sv \
    tb/pcie_host_model.sv tb/tb_felix_top.sv --top-module tb_felix_top -o sim
obj_dir/sim +verilator+rand+reset+2
```

`tb/pcie_host_model.sv` is a behavioural PCIe core plus sparse host memory.
It answers read requests and stalls `rq_ready` at random.

| testbench | what it checks |
|---|---|
| `tb_felix_top` | End-to-end test at 2 sets x 2 links and 32-word FIFOs, described below |
| `tb_felix_full` | Full default size: 24 links, 192 E-links, 512-word FIFOs. A to-host stream on 4 links, one from-host block, L1A decoding, lock state |
| `tb_felix_set`, `tb_central_router`, `tb_wupper`, and one per leaf block | Each block on its own, against values the testbench computes |

`tb_felix_top` builds front-end emulators, channel delays, host software
following circular buffers and a TTC source. It counts each mechanism:

- word slips;
- DMA full stalls;
- buffer wraps;
- block overflows and the gaps they leave;
- BUSY;
- L1A and BCR forwarding;
- wide-bus mode;
- from-host delivery;
- completion length errors;
- interrupts.

It fails if any of them never happens.
