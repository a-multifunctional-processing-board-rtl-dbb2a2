# Data controller of the H1 Fast Track Trigger processing board

The H1 Fast Track Trigger (FTT) reconstructs charged-particle tracks in the
central jet chambers fast enough to feed the first three trigger levels. At
the second level it has about 20 us per event. In that time it must link
track segments from four radial trigger groups into as many as 48 tracks, fit
them, and form a decision. One board design does all of this: it serves as
merger card, L1 linker, L2 linker, fitter and L2 decider. The role depends on
which programs its FPGAs and DSPs run. The board's central FPGA, the *data
controller*, does three jobs:

* it moves 48-bit messages between up to four fast LVDS I/O cards, the DSP
  side and its own logic. Every message carries a 9-bit channel number, and
  a routing table in each component decides where the message goes;
* in the L2 linker role it links track segments with content addressable
  memories (CAMs): 100 CAMs search the 5x5 bins around a seed in all four
  trigger groups in one clock;
* in the L1 linker and L2 decider roles it runs the coarse histogram
  trigger and the final track-based decision.

This repository gives synthesizable SystemVerilog for that data controller
and for the controllers of its I/O cards. The top module is `ftt_board`. The
DSPs, the DSP controller, the VME interface, the dual-ported boot RAM, the
LVDS serializer chips and the clocking are bought parts or software. They are
not modelled: their side of the data controller appears as ports.

The design follows the published description of the board (D. Meer et al.,
"A Multifunctional Processing Board for the Fast Track Trigger of the H1
Experiment", IEEE Trans. Nucl. Sci., 2001). That description gives the
functions and many of the sizes, and it gives the CAM linker in some detail.
It says little about encodings, handshakes or buffer depths. Everything in
this RTL that goes beyond the publication is listed in the section
"Choices made here".

## Data path

```
 LVDS rx[i] (own clock) -> io_card_ctrl[i] --(to board)--> stream_merger --+
 control port in ----------------------------------------> (5 FIFOs)      |
                                                                          v
 user logic out -----------------------------------------------> msg_router
                                                     (2 inputs, 6 outputs, 512-entry table)
 LVDS tx[i] <- io_card_ctrl[i] <-(from board)-- outputs 0..3              |
 user logic in  <-- output 4                                              |
 control port out <-- output 5 <------------------------------------------+

 user logic = l2_linker | l1_linker | l2_decider, selected by the ROLE register
```

All logic runs on the 104 MHz board clock `clk`. The exception is the write
side of each I/O card's receive FIFO, which runs on that card's LVDS receive
clock.

| module | job |
|---|---|
| `ftt_pkg` | message format, types, sizes |
| `io_card_ctrl` | one I/O card: receive FIFO across the clock boundary, card routing table (keep or forward), transmit arbitration with a programmable priority |
| `io_card_dual_rx` | merger variant of an I/O card: a second receiver instead of the transmitter, two receive FIFOs merged onto the board connection |
| `async_fifo` | Gray-pointer dual-clock FIFO (LVDS receive clock to board clock) |
| `sync_fifo` | single-clock FIFO used by the merger, the I/O cards and the linker |
| `stream_merger` | buffers several streams and interleaves them round-robin into one |
| `route_table` | channel-number lookup with a static and a dynamic partition |
| `msg_router` | forwards each word to the output that its channel's table entry names |
| `l2_linker` | CAM-based L2 track linker (seed RAMs, 100 CAMs, tag RAMs, seed loop) |
| `cam` | one content addressable memory (64 x 16 bits, one-cycle search) |
| `l2_peak_finder` | 3x3-in-5x5 window search over the four groups' hit matrix |
| `l1_linker` | four 8x60 histograms, 2-of-4 coincidence, peaks, L1 trigger |
| `l2_decider` | L2 decision from multiplicity, momentum sum and phi-sector jets; forwarding to L3 |
| `ftt_board` | top: the pieces above, configuration registers, role selection |

## Messages

Every word on every link is 48 bits wide. The publication fixes only that
the first 9 bits are the channel number. The rest of this layout is this
design's own:

| bits | field |
|---|---|
| 47:39 | channel number (routing key) |
| 38:36 | type: 0 segment, 1 end of event, 2 linked segment, 3 last linked segment of a track, 4 fitted track, 5 decision |
| 35:0 | segment: group[35:34], kappa bin[33:28] (0..39), phi bin[27:18] (0..639), info[17:0] |
| 35:0 | fitted track: pt[35:20], phi[19:10], theta[9:0] |
| 35:0 | decision: number of tracks[35:1], accept[0] |

Each event ends with an end-of-event word. This word makes the linkers and
the decider start work.

## Routing tables

Routing is by channel number alone. A component does not know the system
layout. Its table only tells it which local port to use for each channel, so
the system is rebuilt by rewriting tables, not logic. `route_table` has 512
entries, one per channel:

* **Static partition.** Channels 0 to 31 are fixed by a parameter and cannot
  be written. On the board they all lead to the control port, so a board
  that has just been configured can already exchange words with its VME
  side.
* **Dynamic partition.** Channels 32 to 511 start out invalid. They are
  written over the local bus at startup. A word whose entry is invalid is
  dropped and counted in `route_drops`.

The table is built from registers with combinational read ports, so several
inputs can look up in the same cycle. The router has two inputs. Input 0 is
the board's own user logic and has priority. Input 1 is the merged stream
from the I/O cards and the control port. The split is necessary. While the
L2 linker is linking it takes no new input, and the next event's words back
up in front of it. If the linker's results had to pass through that same
blocked input, the board would deadlock.

Each I/O card has its own 1-bit table. A received word either goes to the
main board or is forwarded straight to the card's transmitter. That is how a
board in a daisy chain, such as the six fitter cards, passes on words that
are not meant for it. Entries the card does not know go to the main board,
where the router's table decides.

## I/O cards and clock domains

The LVDS channel link delivers one 48-bit word per receive-clock cycle
(about 104 MHz). It cannot be stalled. `io_card_ctrl` writes the words into
`async_fifo`, which carries them into the board clock. Its pointers cross
the clock boundary in Gray code through two-flop synchronisers. If the board
does not drain the FIFO in time, further words are dropped and
`lvds_rx_overflow` pulses. A sender must therefore never send more than the
receiving board can take. The end-to-end test sends traffic that can stall
through the control port, which has back-pressure.

The transmitter has two sources: words forwarded from the receiver and words
from the main board (kept in a 16-word FIFO). When both sources have a word
in the same cycle, the `prio_forward` bit picks the winner. Bit i of
configuration register 0x8001 sets it for card i.

**Merger variant.** A merger board must take in six front-end streams but
carries only four I/O cards. Some cards therefore have a second receiver
in place of the transmitter. `io_card_dual_rx` gives each receiver its own
asynchronous FIFO and interleaves the two synchronised streams
round-robin towards the board. Nothing can be forwarded from such a card,
so it has no routing table. In `ftt_board`, bit i of the parameter
`DUAL_RX` makes card i this variant. Its second receiver is then on the
`lvds_rx2_*` ports, and words routed to the card are discarded. The
default is no such card. With `DUAL_RX = 4'b0011` the board has the six
inputs of a merger card.

## L2 linker

This is the most specialised part of the design. At L2 a segment is located
in a 40 (kappa, curvature) x 640 (phi, azimuth) histogram, which has 25,600
bins. Only a few hundred bins are filled per event. The linker therefore
stores the list of filled bins, not the histogram, and finds neighbours by
content search.

**Storage.** A segment of trigger group g goes to the next free address n of
that group, one segment per clock:

* the *seed RAM* of group g stores its bin number (kappa, phi) at address n;
* the 25 *CAMs* of group g store the same bin number at address n;
* the *tag RAM* of group g stores the segment's 18 information bits at
  address n.

The address is the same in all three, so a CAM hit at address n points
straight at the seed-RAM and tag-RAM entries of that segment. Each group
holds up to 64 segments (`DEPTH`). Further segments are dropped and counted.

**Seed loop.** The end-of-event word starts a loop over the seed lists of
groups 0, 1, 2 and 3. For each seed that is not already used:

1. *Search (1 cycle).* The 25 bins (kappa + a, phi + b) with a, b in -2..2
   are formed. phi wraps around at 640. Bins with kappa outside 0..39 are
   masked off. Bin (a, b) is presented to CAM (a, b) of every group. The
   100 CAMs compare in parallel and register a 64-bit match vector each.
2. *Peak and link (1 cycle).* Each match vector is masked with the group's
   *used* bits and reduced to one bit. The result is a 4 x 5 x 5 hit matrix.
   `l2_peak_finder` scores the nine 3x3 windows that fit in the 5x5 array.
   A window's score is the number of (group, cell) hits inside it. The
   highest score wins. On a tie the centred window wins, then the first in
   row-major order. Every such window contains the seed cell. If the chosen
   window holds segments of at least two groups, a link is made. For each
   group in it the link takes one segment: the seed itself for the seed's
   own group, otherwise the first hit cell of the window in row-major
   order, lowest address first. Those segments are marked used.

A seed that is already used costs one cycle. Each change of group costs one
cycle. Because of the used bits, a track that was linked from its group-0
segment is not linked again from its other segments.

**Output.** Links are queued in a FIFO of depth 64, so the loop never waits
for the output. A serializer then sends one word per linked segment: type 2,
and type 3 for the last segment of the link. The word goes on channel
`track_ch_base + link number`. Each of the up to 48 tracks therefore has its
own channel, and the routing tables can send it to its own fitter DSP. After
the last link the linker sends an end-of-event word on `eoe_ch`. At most 48
links are made per event. Further candidates set `link_overflow`.

**Timing.** Receiving takes one cycle per segment. At the maximum of 256
segments this is 2.46 us, which is the time the published timing estimate
gives for receiving. The CAMs are written in the same cycle, so filling
costs no extra time. Checking 256 unused seeds takes 2 x 256 + 5 = 517
cycles (4.97 us). The published estimate for checking the CAMs is 5.115 us
(532 cycles). The input is stalled (`in_ready` low) from the end-of-event
word until the final end-of-event word has been sent. Receiving the next
event therefore does not overlap with linking.

**Size.** 100 CAMs x 64 entries x 16 bits account for most of the roughly
13,000 flip-flops of the linker.

## L1 linker

At L1 the histograms are coarse: 8 kappa bins x 60 phi bins per group. They
are held directly in registers. A segment sets one bit, at coarse bin
(kappa/5, 3*phi/32). Every bin is evaluated in parallel by its own copy of
the logic:

* the group count of a bin is the number of groups with a segment in the
  bin or in one of its 8 neighbours (phi wraps, kappa does not);
* a bin is a candidate if at least one group has a segment in the bin
  itself and the group count is at least 2;
* a candidate is a peak if its count is greater than that of the
  neighbours before it (the kappa - 1 row and the phi - 1 neighbour) and
  not smaller than that of the neighbours after it. A cluster thus gives
  one peak.

From the peaks come two trigger bits. `trig_mult` is set when the number of
peaks in the kappa bins enabled by `kappa_mask` reaches `mult_thr`; the
enabled bins are the high-momentum ones. `trig_b2b` is set when there are
two peaks 30 +-1 phi bins (about 180 degrees) apart. The end-of-event word
clears the histograms and latches the peaks. The trigger result arrives two
cycles later. The input never stalls.

## L2 decider

The decider builds three quantities while the fitted tracks of an event
come in:

* the number of tracks with `pt >= pt_thr`;
* the scalar sum of pt;
* a jet count. The azimuth is cut into 16 sectors of 40 phi units
  (22.5 degrees). Each track's pt is added to its sector's sum, and a sector
  whose sum reaches `jet_thr` counts as a jet.

It decides on the end-of-event word. The result appears two cycles after
it:

```
accept = (n_thr   != 0 && n_above >= n_thr)
      || (sum_thr != 0 && pt_sum  >= sum_thr)
      || (jet_n   != 0 && n_jets  >= jet_n)
```

A zero threshold switches its criterion off. The decision is pulsed on
`l2_dec_valid` / `l2_dec_accept`. On accept, the stored tracks (up to 48)
are sent to L3 on `l3_ch`. In either case a decision word follows. Sending
48 tracks takes 49 cycles, far inside the 2.5 us that the timing budget
gives this card. Invariant masses of track pairs are left to the DSPs, as
in the original design.

## Configuration (local bus)

`lb_we` writes one word per cycle. The local bus is taken to be synchronous
to the 104 MHz clock.

| address | contents |
|---|---|
| 0x0000 + ch | router table: dest = wdata[2:0] (0-3 I/O card, 4 user logic, 5 control port), valid = wdata[31] |
| 0x1000 * (i+1) + ch | table of I/O card i: forward = wdata[0], valid = wdata[31] |
| 0x8000 | ROLE: 0 L2 linker, 1 L1 linker, 2 L2 decider, 3 merger only (reset value) |
| 0x8001 | forward-first priority bit per I/O card |
| 0x8002 / 0x8003 / 0x8008 | channel base of linked tracks / linker end-of-event channel / L3 channel |
| 0x8004 | L1: kappa_mask[7:0], mult_thr[13:8] |
| 0x8005 / 0x8006 / 0x8007 | decider pt_thr / n_thr / sum_thr |
| 0x8009 / 0x800A | decider jet_thr / jet_n |

In the original hardware each role is a different FPGA program. Here all
three user blocks are present and ROLE connects one of them to the router.
In role 3 the board only merges and routes, and words addressed to the user
logic are discarded.

## Choices made here

The publication is silent on the following. Each point is this design's own
decision:

* **Message payload.** The layout, the end-of-event word and the one word
  per linked segment.
* **Table sizes.** The static partition (channels 0-31) and the valid bits.
* **Depths.** All FIFO depths (16 words), and 64 segments per trigger group
  for the CAMs. The publication gives no CAM depth. 64 x 4 matches the 256
  words of its receive-time estimate.
* **Linker rules.** The used-segment marking, the rule for choosing a
  segment inside the window, the score and tie rule of the peak finder, and
  phi wrap-around.
* **Linker timing.** The seed loop is not pipelined across seeds, and the
  input is stalled while linking. The publication calls the linker fully
  pipelined. This version is two cycles per seed and still meets the
  published cycle budget.
* **L1 linker.** The coarse binning rule, the peak rule, and the form of
  the momentum threshold (a kappa-bin mask) and of the back-to-back
  condition.
* **Decider.** The decision formula, and the jet finder (fixed phi
  sectors). The publication only names jets as a possible criterion.
* **Board structure.** The two-input router with priority for the user
  logic, the role register, the local-bus address map, and a local bus
  synchronous to the board clock. The publication's local bus runs at
  10.4 MHz.
* **CAM implementation.** The CAMs are made of flip-flops and comparators.
  The original uses the embedded CAM blocks of the Altera APEX 20KE family.
* **Merger variant.** The two-receiver card as a build-time parameter
  (`DUAL_RX`), and round-robin merging of its two receivers.
* **Routing-table storage.** The original tables sit in FPGA-internal RAM.
  Here they are registers, so several inputs can look up in the same
  cycle.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it shows |
|---|---|
| `tb_async_fifo` | 500 words across two unrelated clocks in order; overflow drops and flags words; exactly DEPTH words kept |
| `tb_route_table` | static entries fixed and write-protected, dynamic entries written and cleared, two read ports, against a model |
| `tb_cam` | match vectors against a linear search, duplicates, clear |
| `tb_l2_peak_finder` | 2000 random hit matrices against an independent window search |
| `tb_l2_linker` | full size: 22 tracks including a phi wrap and a two-group track, with noise; exact output words; exact seed-loop cycle count; 48-link overflow; segment overflow |
| `tb_l1_linker` | directed back-to-back, single-group, adjacent-bin and wrap events, plus 200 random events against a model; two-cycle latency |
| `tb_l2_decider` | 150 random events against a model: counters, sector jets, decision, latency, words to L3, overflow above 48 tracks; events exactly on each threshold |
| `tb_io_card_dual_rx` | two receivers on unrelated clocks: both streams complete and in order, interleaved; overflow of one receiver flagged only there |
| `tb_ftt_merger` | the board as merger card (`DUAL_RX = 4'b0011`): six LVDS streams of 300 words each leave through one transmitter, each stream in order, no overflow |
| `tb_stream_merger`, `tb_msg_router`, `tb_io_card_ctrl` | ordering under random back-pressure, stalls, drops, priority |
| `tb_ftt_board` | the whole board at default sizes. It runs L2 linking over LVDS with the next event stalled behind it, a 48-link overflow, card forwarding, a static route, a dropped word, an L1 back-to-back trigger after a role switch, and after another two L2 accepts with words to L3, one by multiplicity and one by jets alone. Each of these must occur |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/ftt_pkg.sv rtl/*.sv tb/tb_l2_linker.sv \
          --top-module tb_l2_linker -Mdir obj && obj/Vtb_l2_linker
```

Substitute any testbench name. With `-Wall` Verilator reports only style
warnings: unused package constants and outputs left open. Building the full
board test takes about a minute; it runs in under a second.

Limits on how far the design can be trusted:

* The testbenches check the rules written above. Those rules are partly this
  design's own, so passing does not show that the linker reproduces the
  original trigger's efficiency.
* No physics events were simulated.
* Timing closure at 104 MHz has not been studied. The 100-CAM search and the
  per-group address selection are wide combinational paths.
