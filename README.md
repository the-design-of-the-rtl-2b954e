# A triggerless readout chain for the SPD data acquisition

The Spin Physics Detector at NICA reads out its detector without a trigger.
Every hit above threshold is sent to the DAQ with a timestamp. Time is cut into
**frames** (0.1 to 10 s) and each frame into **slices** (10 to 100 µs). A slice
is the unit of data: all hits of one slice must end up together, labelled with
their frame and slice number, so that software can rebuild the slice from all
readout computers.

This RTL models one **readout chain**: the path from the front-end boards (FEE)
through two levels of concentrators into the memory of one readout computer.

```
 FEE x8 ──1 Gbit/s──► L1 concentrator ──Ethernet II, 10 Gbit/s──► L2 concentrator ──► host RAM
   ▲   command line    (one per 8 FEE)                                (8..16 L1 per L2)   (ring buffer)
   └── reset line      contains the TSS node
```

Everything runs on one 125 MHz clock, the global clock that the White Rabbit
network distributes to every element. The chain has four jobs:

1. Tell every FEE, cycle-exactly, when frames and slices start, and which
   frame number comes next (the *synchronous commands*).
2. Move each FEE's data, one packet per slice, to its L1 and check it there.
3. Merge the eight FEE streams of an L1 into one stream ordered by (frame, slice),
   and restore the full 32-bit frame and slice numbers that the FEE sends only
   in part.
4. In the L2, gather the packets of all L1 links into whole slices and write each
   slice as one contiguous block into a ring buffer in host memory.

The sections below follow the data along this path. Each section marks what the
published design fixes and what this implementation chose itself.

## 1. Frames, slices and the command line

### The three synchronous commands

| Command | Effect in the FEE |
|---|---|
| Set Next Frame (SNF) *n* | loads *n* as the next frame number; must arrive whole or not at all |
| Start of Frame (SOF) | closes the current frame (and its last slice), opens the preloaded frame, slice 0 |
| Start of Slice (SOS) | closes the current slice and opens the next one, numbered by the FEE itself |

An SOF without a preloaded number closes the current frame and opens nothing.
This is how a run ends.

Two asynchronous commands, *Arm* and *Disarm*, are one reset line per FEE
(`fee_rst`). The line is driven from the L1 register `ARM`.

### Line encoding (this design's choice)

The published design says only that commands are pulse trains that travel with
the global clock. Here they are a serial bit train on one wire, one bit per clock:

```
SOF / SOS :  1  c1 c0                        (3 bits)   code SOF = 01, SOS = 10
SNF       :  1  1  1  n31 ... n0  p          (36 bits)  p = even parity over n
```

A command takes effect on the cycle after its last bit. An SNF with bad parity
is discarded (`parity_err`), which gives the required atomicity: a partly
received number is never used.

### The TSS node (`tss_node`, in each L1)

The TSS node plays the run schedule that the White Rabbit node delivers. The
schedule is modelled as the inputs `run_start`, `run_stop`, `first_frame`,
`slice_len` (cycles) and `slices_per_frame`. It works as follows:

- At `run_start` it sends SNF(`first_frame`).
- `SNF_LEAD` (64) cycles later it sends the first SOF.
- Inside a frame it sends an SOS every `slice_len` cycles. After `slices_per_frame`
  slices it sends an SOF instead.
- Right after each SOF it announces the following frame with SNF(frame+1).
  This needs `slice_len` > 36 cycles. The module asserts `slice_len` ≥ 48.
- `run_stop` cancels an SNF that has not been sent yet. The next SOF then finds
  no preloaded number, and the run ends at that frame boundary. If the SNF has
  already gone out, one more frame runs.

`cur_frame`, `cur_slice` and `prev_frame_slices` give the L1 its own copy of the
time structure, which the merge needs (section 3).

### The FEE side (`fee_cmd_receiver`)

The receiver decodes the line. It keeps the next-frame register and the frame
and slice numbers, and counts a time counter from each SOF (timestamps are
relative to the frame start). It pulses `slice_end` with the numbers of the slice
that just closed. While `fee_rst` is high, everything is cleared and commands
are ignored. A board armed in the middle of a run therefore joins at the first
SOF whose frame it saw announced.

## 2. Packets and their checks

All data is in 32-bit words. The published design requires 32-bit alignment.

### FEE to L1 (`feb_packet_tx` → `l1_data_receiver`), layout as published

```
word 0 : type[31:26]  board id[25:16]  packet number[15:8]  time LSB[7:0]
word 1 : format[31:26] frame LSB[25:16] slice LSB[15:0]
payload words ...
CRC-32 over words 0..n
```

How the FEE side sends packets:
- `feb_packet_tx` collects the FEE's hit words per slice.
- When the slice closes, it sends one packet, even an empty one. The empty packet
  tells the L1 that this FEE has finished the slice.
- Slices larger than `MAX_PAYLOAD` (64) words are split into several packets.
- The link carries one word every 4 cycles, which is 1 Gbit/s at 125 MHz. It has
  no back-pressure. Hits that find the buffers full are counted in `hits_lost`.
- The serial line coding and the LVDS SerDes are not modelled. The link is
  word-parallel with a valid strobe.

What the L1 receiver does:
- `l1_data_receiver` recomputes the CRC and discards bad packets (`cnt_crc_err`).
- It counts gaps in the 8-bit packet number as lost packets (`cnt_lost`).
- It stores good packets in a store-and-forward buffer (`pkt_fifo`), which can
  drop a packet that turns out not to fit (`cnt_ovf`).
- It hands the merge a descriptor (header words and length) plus the payload.

**CRC.** IEEE 802.3 CRC-32 (reflected polynomial 0xEDB88320, preset all ones,
result inverted). Each word is fed most significant byte first. The published
design asks only for "a checksum".

### L1 to L2 (`l1_merge` output), layout as published

```
word 0 : type[31:26] L1 port[25:22] board id[21:14] format[13:8] packet number[7:0]
word 1 : frame number (32 bits)
word 2 : slice number (32 bits)
payload words ...
```

The two published layouts disagree on the board id: 10 bits from the FEE, 8 bits
towards L2. The L1 keeps the low 8 bits. The FEE's time LSB has no field in the
L1-L2 header and is dropped. There is no length field. A reader of the output
finds packet boundaries only through the payload format, and the testbenches
make their hit words self-describing for that reason.

### Ethernet II between L1 and L2 (`eth_tx`, `eth_rx`)

The published design names Ethernet II ("raw 802.3") between the concentrators.
The word-level framing here is this design's choice:

```
word 0 : destination MAC[47:16]
word 1 : destination MAC[15:0], source MAC[47:32]
word 2 : source MAC[31:0]
word 3 : EtherType 0x88B5, 16-bit zero pad (keeps the packet word aligned)
L1-L2 packet
FCS    : CRC-32 of words 0..n, low byte first as on the wire
```

Frames are not padded to 64 bytes, because the receiver could not strip the
padding without a length field. `eth_rx` checks the FCS and the EtherType, and
buffers whole frames. It releases a frame only when it is good, and drops and
counts it otherwise (`cnt_fcs_err`, `cnt_drop`). The 10G MAC/PCS and the optics
are not modelled.

## 3. The L1 merge: ordering without a common schedule

The published design stresses that an FEE sends its data *some time* after the
slice ends, with no fixed delay. The L1 therefore cannot know in advance when a
slice is complete. `l1_merge` relies on two facts instead:

1. every FEE sends at least one packet per slice, and
2. every FEE sends its slices in order.

Each port's queue is thus sorted by (frame, slice). The merge is a k-way merge.
Among the packets at the queue heads it takes the one with the smallest
(frame, slice); ties go to the lowest port. It takes that packet only when no
enabled port could still deliver something smaller. An empty port can deliver
nothing smaller if it has already delivered a packet whose (frame, slice) is not
below the candidate. With this rule the last slice of a run leaves without
waiting for packets that will never come.

**Timeout.** A port that stays empty for `timeout_cycles` (register `TIMEOUT`,
default 100 000 cycles = 0.8 ms) while others wait is skipped and counted
(`cnt_timeouts`). It is then treated as absent until it delivers a packet again,
so a dead FEE costs one timeout, not one per packet. Disabling the port in
`PORT_EN` removes it from the merge altogether. If a skipped FEE comes back, its
packets may be older than what has already gone out. The L2 drops them as late.

**Full numbers.** The FEE sends the low 10 bits of the frame and the low 16 bits
of the slice. The merge restores the full numbers from the L1's own TSS counters
with

```
extend(ref, lsb, w) = ref - ((ref - lsb) mod 2^w)
```

This is the latest number not after `ref` whose low `w` bits equal `lsb`. The
frame reference is `cur_frame`. The slice reference is `cur_slice` when the
packet belongs to the current frame. For a packet of the previous frame it is
`prev_frame_slices - 1`. This stays correct while packets arrive less than 1024
frames and 65536 slices late.

**L1 registers (`l1_reg_control`)**, word addresses:

| Address | Register | Notes |
|---|---|---|
| 0x000 | `ARM` | one bit per FEE, 1 = armed; reset value 0 (all in reset) |
| 0x001 | `PORT_EN` | reset value 0xFF |
| 0x002 | `TIMEOUT` | merge timeout in cycles |
| 0x003 | `ALARM` | write 1 to clear a port's bit; set by CRC errors, lost packets or overflow |
| 0x004–0x007 | MACs | source and destination MAC |
| 0x100 + 8·p + k | per-port counters | k = 0 packets, 1 words, 2 CRC errors, 3 lost, 4 overflow |

Reads return data one cycle after `reg_rd`. The register map is this design's
own choice. The published design sends control data from the L2 over the
optical link, and the format of those messages is not given. Here the register
bus is a port.

## 4. The L2: from packets to whole slices

`l2_concentrator` chains four blocks:
- `eth_rx`, one per link;
- `l2_arbitrator`, a packet-granular round robin, so packets never interleave;
- `l2_data_sort`;
- `l2_dma`.

### Slice bins (`l2_data_sort`)

The published design says only that the L2 "pre-sorts" data before sending it to
the computer. Here pre-sorting means this: every slice leaves the L2 as one
block that holds the packets of all links for that slice, and blocks leave in
slice order. The method is this design's own:

- **Bins.** There are `NBINS` (8) bins of `BIN_WORDS` (2048) words. On the board
  they would live in the DDR4; here they are an on-chip array. A packet goes to
  the open bin of its (frame, slice), or opens a free bin.
- **Watermarks.** For each link the sort keeps the (frame, slice) of the last
  header it saw. A link's packets are ordered, so once its watermark has passed
  a slice, that link will send nothing more for it.
- **Completion.** A bin is complete when every link enabled in `link_en` has
  passed it. The oldest bin is sent once it is complete.
- **Stall and eviction.** If a new slice needs a bin and none is free, the input
  stalls (`cnt_stall`). The oldest bin is then sent at once, incomplete, and
  marked *early* (`cnt_early`). Waiting instead could deadlock: the packet that
  would complete the oldest bin can sit behind the stalled packet.
- **Late packets.** A packet for a slice that has already been sent is dropped
  (`cnt_late`).
- **Overflow.** A packet that does not fit its bin is dropped, and the slice is
  marked *lost* (`cnt_ovf`).
- **Flush.** While `flush_all` is high, open bins are sent without waiting. This
  is for the end of a run, since the last slice of a run never completes by
  watermark.

Slice block in host memory:

```
word 0 : frame number
word 1 : slice number
word 2 : flags[31:24] (bit 24 data lost to overflow, bit 25 sent early) | 8'h00 | data word count[15:0]
the stored L1-L2 packets, unchanged
```

### Ring buffer in host memory (`l2_dma`)

The published design writes data straight into the computer's RAM over PCIe 3.0
x16. The PCIe core is not modelled. Each word becomes a memory-write request
(`req_valid/req_addr/req_data/req_ready`) into a ring of `ring_words` words at
`ring_base`. Two free-running counters manage the ring:

- `wr_count` is published only at the end of a slice block, so the host never
  sees part of a slice.
- `rd_count` is returned by the host as it consumes.

A full ring stalls the DMA (`cnt_full_cycles`), and the stall propagates back
into the sort. `ring_words` must be at least `BIN_WORDS + 3`. Otherwise one
large slice could never be published, and the ring would lock.

## 5. The top level (`spd_readout_chain`)

Parameters (defaults): `N_L1 = 8` L1 concentrators (the published range is 8 to
16), `NF = 8` FEE per L1, `NBINS = 8`, `BIN_WORDS = 2048`.

The top instantiates, for each of the 64 FEE, a `fee_cmd_receiver` and a
`feb_packet_tx`; then `N_L1` `l1_concentrator`s and one `l2_concentrator`. Its
ports are plain signals and arrays:

- **Run schedule.** One set of inputs feeds all L1s, as a broadcast schedule would.
- **Per FEE `[N_L1][NF]`.** `fee_board_id`, `fee_fmt_id`, `hit_valid`,
  `hit_data`. These are the detector-specific front-end logic, which stays
  outside the chain.
- **FEE status.** `fee_in_frame`, `fee_hits_lost`, `fee_parity_err`.
- **Per L1.** The register buses, `l1_alarm`, `l1_timeouts`, `l1_running`,
  `l1_frame`, `l1_slice`, `l1_eth_frames`.
- **L2 controls.** `link_en`, `flush_all`, the ring settings and the memory-write
  port.
- **L2 counters.** `l2_frames`, `l2_fcs_err`, `l2_drop`, `cnt_slices`,
  `cnt_late`, `cnt_ovf`, `cnt_stall`, `cnt_early`, `cnt_full_cycles`.

The Ethernet links from L1 to L2 are always ready: Ethernet has no
back-pressure, so the L2 buffers drop whole frames when they overflow.

**Clock and rates.** One 125 MHz clock runs everywhere. FEE links carry 32 bits
per 4 cycles (1 Gbit/s, as published). L1 output, L2 sort and DMA move one word
per cycle (4 Gbit/s). This is less than the published 10 Gbit/s L1 links and the
8–12 GB/s PCIe transfer. A real L2 would run its links and PCIe in faster clock
domains with wider data paths.

## 6. Sizing against the published figures

| Configuration (source) | Needed | This design |
|---|---|---|
| Phase 1 detector (outputs table: 1292 FEE outputs) | 1292 / 8 = 162 L1; 162 / 8 = 21 chains (11 at 16 L1 per L2) | one chain instance per 64 FEE: fits by replication |
| Phase 2, MAPS vertex (5800 outputs) | 725 L1; 91 chains at 8 L1 per L2 | fits by replication; `N_L1` accepts up to 16 (4-bit port field) |
| Phase 2, DSSD vertex (4811 outputs) | 602 L1; 76 chains | fits by replication |
| 20 GB/s over about 150 chains (published totals) | 133 MB/s per chain on average | L2 path 500 MB/s: the average fits, but a chain near the full 10 Gbit/s per L1 does not |
| Slices of 10–100 µs, frames of 0.1–10 s (published) | up to 12 500 cycles per slice, up to 10⁶ slices per frame | 32-bit `slice_len`, `slices_per_frame` and numbers: fits |
| Data per slice (own estimate) | a 100 µs slice at 500 MB/s is up to 12 500 words | one bin holds 2048 words: heavy slices are cut and flagged; bins are sized for simulation |

## 7. Where this design departs from the published one

- The board id is cut from 10 to 8 bits at L1, and the FEE time LSB is not
  forwarded. The two published header figures do not agree on these fields.
- There is one clock for everything, including the L2. Link and PCIe rates are
  not reached (section 5).
- The White Rabbit core and switches, the TSS controller, the SerDes and cables,
  the 10G and 1G MAC/PHY, the PCIe core, the DDR4 and the firmware
  reconfiguration path are not modelled. Their signals are ports.
- Only Arm/Disarm are modelled among the asynchronous commands. FEE slow-control
  commands and their addressing are not given in the published design.
- **Unflagged losses.** A frame dropped by `eth_rx` (bad FCS or a full buffer)
  leaves its slice incomplete without a flag. The L2 cannot tell which slice the
  frame belonged to. The packet numbers in the L1-L2 headers let software detect
  the gap.
- **Packets from a returning FEE.** After a merge timeout, the FEE's later
  packets may be older than what has already been sent. The L2 drops them as late.
- The slice bins are on chip and small (8 × 2048 words). The ring must be at
  least one bin plus 3 words.

## 8. Verification

Every block has a self-checking testbench in `tb/`. Each one ends with a line
`TB_RESULT checks=<n> failures=<m>`, has a watchdog, and draws its random
stimulus from `$urandom`.

| Testbench | What it checks |
|---|---|
| `tb_spd_daq_pkg` | CRC-32 against known values, number restoration, header bit positions |
| `tb_tss_node` | command timing, frame/slice sequence, SNF contents and parity, run stop |
| `tb_fee_cmd_receiver` | decoding, numbering, parity rejection, SOF without SNF, reset |
| `tb_feb_packet_tx` | packet layout, CRC, splitting, empty slices, pacing, lost hits |
| `tb_l1_data_receiver` | CRC errors, lost packets, overflow, payload integrity |
| `tb_l1_merge` | order, tie-break, number restoration across frames, timeouts |
| `tb_l1_reg_control` | register map, reset values, alarm, counters |
| `tb_eth_tx`, `tb_eth_rx` | framing, FCS against a known value, dropped bad frames |
| `tb_l2_arbitrator` | round robin, packets never interleaved, back-pressure |
| `tb_l2_data_sort` | completion by watermark, stall and eviction, late drop, overflow, flush |
| `tb_l2_dma` | ring addresses and wrap, publication at block ends, ring-full stall |
| `tb_l1_concentrator` | one L1 with 8 FEE models: full payload integrity, timeouts, port disable |
| `tb_l2_concentrator` | 8 links into host memory, bad FCS, ring full, flush |
| `tb_spd_readout_chain` | see below |

The helper FIFOs `pkt_fifo` and `sync_fifo` have no testbench of their own.
They are covered through the blocks that use them.

`tb_spd_readout_chain` runs the whole chain at its default size: 8 L1s, 64 FEE
and one L2, with no parameter overrides. It plays a 13-frame run in which:
- one FEE starts disarmed, so its L1 times out and falls 10 slices behind;
- the L2 stalls, evicts slices early and drops the late packets;
- every FEE produces a hit burst that overflows one bin;
- the host stops reading until the ring is full;
- the disarmed FEE is armed and joins mid-run;
- the lagging L1's backlog overflows its L2 input buffer;
- the run stops at a frame boundary, and `flush_all` empties the bins.

It checks the data in host memory:
- slice order;
- packet placement;
- per-FEE hit sequence;
- completeness of every unflagged slice from links that lost nothing;
- counter consistency.

Each of these mechanisms is counted, and the test fails if any of them never
happened. It simulates in about a second.

Each testbench was also run against a copy of its block with one deliberate
bug, and it failed every time.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  --top-module tb_spd_readout_chain -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/spd_daq_pkg.sv tb/tb_spd_readout_chain.sv
./obj_dir/Vtb_spd_readout_chain
```

## 9. Files

- `rtl/spd_daq_pkg.sv`: widths, header structs, command codes, CRC step, number restoration.
- `rtl/tss_node.sv`, `rtl/fee_cmd_receiver.sv`: synchronous commands.
- `rtl/feb_packet_tx.sv`, `rtl/l1_data_receiver.sv`, `rtl/l1_merge.sv`,
  `rtl/l1_reg_control.sv`, `rtl/eth_tx.sv`, `rtl/l1_concentrator.sv`: FEE link and L1.
- `rtl/eth_rx.sv`, `rtl/l2_arbitrator.sv`, `rtl/l2_data_sort.sv`, `rtl/l2_dma.sv`,
  `rtl/l2_concentrator.sv`: L2.
- `rtl/pkt_fifo.sv`, `rtl/sync_fifo.sv`: buffers.
- `rtl/spd_readout_chain.sv`: the top.
- `tb/`: one testbench per block, plus `tb_common.svh` (check and finish macros)
  and `tb_crc_ref.svh` (a bit-serial reference CRC).
