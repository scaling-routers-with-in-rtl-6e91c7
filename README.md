# A split-parallel router with in-package optics and HBM packet buffers

A backbone router has to do two things that no single chip does well at once:
move hundreds of terabits per second in and out, and hold tens of milliseconds of
that traffic in a buffer. Electrical pins limit the first. On-chip SRAM is far
too small for the second. This design handles both by splitting the router into
many small routers inside one package:

* Every input and output is a **ribbon of fibres**. The fibres reach the
  package directly, through optics built into the package. Each ribbon's
  fibres are divided, by fixed wiring, among **H parallel HBM switches**.
  A packet arriving on a fibre can only go to the one switch that fibre is
  wired to. It leaves that switch on one of the fibres the switch owns in the
  output ribbon. Nothing connects one switch to another.
* Each **HBM switch** is an ordinary N x N output-queued switch. Its buffer is
  a set of HBM stacks. The hard part is keeping the HBM busy at full bandwidth
  while packets are small and arrive in any order. **Parallel Frame
  Interleaving** (PFI) does this. Packets are packed into fixed *batches*.
  Batches for the same output are collected into large *frames*. Every frame is
  spread over all HBM channels at once and written as one unit to a small group
  of banks. A fixed, repeating schedule opens and closes those banks so that
  the data bus never waits for a row.

This RTL gives the whole digital data path of that router at its reference
size:

| | |
|---|---|
| ribbons (router ports) | N = 16 in, 16 out |
| fibres per ribbon | F = 64; W = 16 wavelengths x 40 Gb/s = 640 Gb/s each |
| parallel HBM switches | H = 16, each N x N, with alpha = F/H = 4 fibres per ribbon |
| switch port rate | 4 x 640 Gb/s = 2.56 Tb/s = 1024 bits per cycle at 2.5 GHz |
| batch | 4 KB = N slices of 256 bytes, one 2048-bit SRAM word per slice |
| frame | 512 KB = 128 batches |
| HBM per switch | 128 channels of 256 bits per cycle (4 HBM4 stacks), 64 banks, groups of gamma = 4 |
| router total | 1024 fibres, 655 Tb/s each way, 4 TB of packet buffer |

The optics, the HBM dies and their PHYs, and the forwarding lookup are outside
the RTL. The fibre traffic enters and leaves as electrical 32-byte words, with
the output port already looked up. The HBM stacks are reached through command
and data ports at the switch clock.

## 1. The fibre split

`sps_router` instantiates H `hbm_switch`es and wires the fibres. For ribbon r,
a Fisher-Yates shuffle computes a permutation of its F fibres. The generator is
a linear congruential generator seeded from `SEED` and r. Fibre `perm(p)` goes
to switch `p / alpha`. A second shuffle, with a different seed, does the same
for the output ribbons. Both shuffles are evaluated at elaboration, so the split
is wiring and costs no logic.

Inside a switch, port i is the group of alpha waveguides from ribbon i.
Switch port o drives alpha fibres of output ribbon o. A router of H switches is
therefore exactly H independent switches, each with 1/H of every ribbon. There
is no load balancing between switches. The split is random so that it does not
line up with how upstream routers spread flows over their fibres.

## 2. Inside one HBM switch

```
 alpha waveguides                                          alpha waveguides
 per port                                                  per port
   |                                                           ^
 lane_merge -> input_port -> cyclic_xbar -> tail_sram -> hbm_ctrl <-> HBM
 (32 B/lane)   (VOQs,        (input side)   (N modules,    (PFI)
               batches)                     frames)          |
                                                          head_sram -> cyclic_xbar -> output_port -> lane_split
                                                          (N modules)  (output side) (unpacking)     (hash to
                                                                                                     lane, lambda)
```

All blocks share one clock. A free-running counter `ph` (0..N-1) gives the
phase. Both crossbars, the input ports' send slots and the head SRAM's read
order all follow it.

* **lane_merge** takes the alpha waveguides of a port. Each carries 32 bytes
  per cycle. It buffers each lane in a small FIFO and emits whole packets, one
  at a time, as 128-byte words (`line_word_t`). A packet arriving at a full
  lane FIFO is dropped whole.
* **input_port** keeps one queue per output (virtual output queues). It packs
  the packets into batches and sends finished batches through the input
  crossbar (section 3).
* **tail_sram** is N SRAM modules with per-output queues. It turns batches into
  frames (section 4).
* **hbm_ctrl** runs PFI. It writes frames from the tail SRAM to HBM and reads
  them back into the head SRAM (section 5).
* **head_sram** is N SRAM modules. It receives frames and feeds the outputs one
  batch at a time through the output crossbar.
* **output_port** unpacks batches back into packets (section 6).
* **lane_split** spreads each port's packets over its alpha waveguides and W
  wavelengths by flow hash.

`voq_sram` is the shared helper: an SRAM of 2048-bit words, split into static
per-queue regions, with one write and one read per cycle. `pfi_pkg` holds the
constants, the word structs and the flow hash.

## 3. Batches and the cyclic crossbar

A **batch** is N x 256 bytes, 4 KB at N = 16. It is the unit that crosses the
input crossbar. It is written as N SRAM words, one *slice* per SRAM module of
the tail SRAM. The byte layout is this design's own:

```
batch:   [hdr 4 B: byte0 = input port number][desc 4 B: len][packet, padded to 4 B][desc][packet]...
```

* Each packet is preceded by a 4-byte descriptor holding its length.
* Packets are padded to a multiple of 4 bytes.
* A packet may **straddle** two batches: its tail continues after the header
  of the next batch of the same input and output.
* The header exists so the output port can tell which input a batch came from.
  Consecutive batches of one output come from different inputs, so the output
  port needs this to rejoin straddling packets.
* A queue that cannot hold a whole new packet drops it at its first word.
  Room is counted in whole slices.

Input port i may send in the cycle where `(i + ph) mod N == 0`. It then emits
the batch's slices on N consecutive cycles, slice s at phase
`ph = (s - i) mod N`. The input crossbar connects input port i to tail module
`(i + ph) mod N`, so slice s reaches module s. All N inputs do this at
different offsets, so in every cycle each module receives exactly one slice.
Across cycles, every batch visits modules 0, 1, ..., N-1 in order. Module m
therefore sees the same batch sequence as module 0, m cycles later. This is
what makes the tail SRAM easy to manage. Every module holds the same queues in
the same state; the modules differ only by a delay.

Before sending a batch, the input port asks the tail SRAM for room
(`tail_space_i`) and reserves it (`bstart_o`). A batch is never refused after
it starts. An input port writes at most one slice per cycle and reads one per
cycle, which is the 2P SRAM bandwidth of one write stream plus one read stream.

The output crossbar is the mirror image. Head module m reaches output
`(m - ph) mod N`. Module 0 decides, in phase ph, whether to send a batch to
output `-(ph+1) mod N`. Module m repeats that decision m cycles later. So the
batch's slices arrive at the output on N consecutive cycles, module 0 first.

## 4. Frames in the tail SRAM

The tail SRAM counts completed batches per output. A batch is complete when
its last slice reaches module N-1. When an output has FRAME_BATCHES = 128
complete batches, they form a **frame** (512 KB). The output number then goes
into a frame FIFO shared by all outputs. The frame is the unit of HBM access.
A frame is 128 slices in each of the N modules. Module m's slices go to HBM
channels 8m .. 8m+7. So a frame is written over all 128 channels at once. Each
channel receives 4 KB of it: one 1 KB *segment* into each of the gamma = 4
banks of one bank group.

Room is reserved per batch when an input port starts a batch. Each output owns
`Q_FRAMES` frames of room per module; the default is 2.

## 5. Parallel Frame Interleaving (hbm_ctrl)

This is the core of the design, and the part to read first when changing it.

**The cycle.** Time is cut into *frame interleaving cycles* of
`CYC = 2*gamma*SEG + G_WTR + G_RTW` clock cycles: 260 at the defaults
(SEG = 32, gaps of 2). Each cycle has two phases:

```
tc:  0 ........ 127 | 128 129 | 130 ........ 257 | 258 259
     write phase    | G_WTR   | read phase       | G_RTW
     one frame      | idle    | one frame        | idle
     4 segments     |         | 4 segments       |
```

A phase is gamma = 4 segments. A segment is SEG = 32 beats of 256 bits on
every channel, which is 1 KB per channel, all into one bank. Segment s of a
phase goes to bank `group*gamma + s`. A frame is therefore 128 beats x 128
channels x 32 B = 512 KB, matching the tail SRAM frame.

**Bank timing.** A bank is activated one segment before its data starts.
It is precharged one cycle after its data ends. The gamma banks of the group
open and close in a staircase:

```
bank g*4+0:  ACT ....[ data 32 ] PRE
bank g*4+1:          ACT ....[ data 32 ] PRE
bank g*4+2:                  ACT ....[ data 32 ] PRE
bank g*4+3:                          ACT ....[ data 32 ] PRE
```

So the data bus runs without a gap through the whole phase, and a row is
always open in time. The schedule also keeps the single row-command bus free
of clashes. SEG and the gaps are even, so an ACT always falls on an even cycle
of the phase and a PRE on an odd one. ACTs are SEG cycles apart, so at most
four ACTs fall in any window of 4*SEG cycles (51.2 ns). This is the HBM
four-activate window, and the reason the segment is 1 KB. The controller has
no timing parameters of its own beyond SEG and the gaps. The DRAM timing has
to fit inside one segment: tRCD and tRP of at most SEG cycles, tFAW of at most
4*SEG cycles.

**Where a frame goes.** There are no tables. The n-th frame of output j goes
to:

* bank group `n mod (L/gamma)`, one of 16 groups;
* sub-row `(n div 16) mod SUBROWS` of the row;
* row `j*REGION_ROWS + (n div (16*SUBROWS)) mod REGION_ROWS`.

Each output owns a fixed region of rows. Consecutive frames of an output use
different bank groups. The whole state is two counters per output (frames
written, frames read) and the occupancy derived from them. Frames are read
back in the order they were written, which keeps packets in order.

**What gets written and read.**

* *Write phase.* If the tail SRAM's frame FIFO is not empty at the start of a
  write phase, the controller pops one frame. It reads it out of all N tail
  modules in lockstep, one slice per module per cycle, one cycle ahead of each
  write beat. The last beat frees the frame's room in the tail SRAM.
* *Read phase.* Outputs take turns in a fixed cyclic order, one turn per cycle.
  A turn is used only if that output has a frame in HBM and the head SRAM has
  room for a whole frame for it. That room is reserved at the decision. An
  unused turn leaves the read phase idle.
* *Read data.* Data returns after the memory's read latency. The controller
  does not assume that latency: it matches returned beats to reads in order.
  Each beat is one slice per head module. Every beat makes one more whole
  batch available for that output.

A write phase with nothing to write, or a read turn with nothing to read,
simply issues no commands. The schedule itself never shifts.

## 6. Back to packets (output_port, lane_split)

The output port collects batches, N slices each, in a small FIFO. It walks each
batch as a byte stream. It reads the header to learn the source input, then the
descriptors and packet bytes. Because a packet may straddle two batches from
the same input, with batches from other inputs in between, the port keeps
state per input: the bytes still missing and a partial 128-byte word. Each
input has its own region of a packet buffer. Completed packets join a ready
queue in completion order.

The sender hashes the packet's IPv4 5-tuple (`pfi_pkg::flow_hash`, a fold of
source and destination address, ports and protocol). The egress waveguide is
hash mod alpha and the wavelength is (hash div alpha) mod W. The sender waits
until that waveguide's FIFO in `lane_split` can take a maximum-size packet,
then sends the packet one 128-byte word per cycle. `lane_split` serialises
each packet onto its waveguide at 32 bytes per cycle. Packets of one flow
always take the same waveguide and wavelength, so they stay in order.

## 7. Flow control and where packets are lost

Packets are dropped in only two places, both on arrival:

* `lane_merge`, when a lane FIFO is full. The merge emits one packet per
  cycle, so it keeps up with full line rate only for packets of 128 bytes and
  more; a run of shorter packets at full rate on all lanes overflows it;
* `input_port`, when the output's queue cannot hold the packet.

Everything after the input port is lossless, by reservation:

* a batch starts only into reserved tail room;
* a frame read is issued only into reserved head room;
* a batch leaves the head SRAM only when the output port has room;
* a packet is sent only when its waveguide FIFO has room.

Under overload, a full queue holds back the stage before it, up to the input
port, where the packet is dropped. Each switch reports `drops_o` and
`pkts_out_o`.

## 8. Where this design departs from the reference design

* **Frame size.** The reference gives frame size both as channels x segment and
  as gamma x channels x segment. This design uses the second, 512 KB. That is
  the one that matches writing one frame into the gamma banks of a group.
* **Write/read alternation.** One description writes L frames and then reads L
  frames. The timing diagram alternates one frame write and one frame read per
  cycle. This design follows the diagram. The cost is bandwidth. The two
  turnaround gaps (4 cycles) come once per frame, not once per L frames. So
  writes get 128 of every 260 cycles: 98.5 % of half the HBM bus, 40.3 Tb/s
  against the 40.96 Tb/s the switch ports can bring in. Under full load on
  every input, the tail SRAM fills by about 1.5 % of the traffic, and the
  excess is eventually dropped at the input ports. The reference counts its
  gaps as about 0.05 %.
* **Port width.** A 2048-bit port at 2.5 GHz would be twice the 2.56 Tb/s port
  rate. The switch port (`line_word_t`) is therefore 1024 bits per cycle, and
  the 2048-bit width is used for SRAM words and batch slices.
* **Static SRAM regions.** Every output owns fixed room in the tail and head
  SRAMs: 2 frames each, about 35 MB per switch in total. The reference proves
  a bound of (N+1)/2 frames for the head SRAM, about 14.5 MB of SRAM per switch
  overall, with shared space. The static split is simpler and never blocks one
  output behind another, but it uses more SRAM.
* **Own choices** where the reference is silent: the byte format (batch header,
  descriptors, 4-byte padding), the per-input reassembly in the output port,
  the lane FIFOs, the flow hash function (the reference only says 5-tuple
  hash), the reset behaviour, the 2048-byte maximum packet, and the
  sub-row/row address map.
* **Not built:**
  * frame padding and HBM bypass for low load, which the reference mentions as
    an option;
  * HBM refresh;
  * the mesh-crossbar alternative.
  * Optics, HBM dies, PHYs, the forwarding lookup, clocking and power have no
    RTL here.

## 9. Files

| file | contents |
|---|---|
| `rtl/pfi_pkg.sv` | sizes, word structs, HBM command types, flow hash |
| `rtl/sps_router.sv` | top: H switches and the fibre split |
| `rtl/hbm_switch.sv` | one switch, wiring of the blocks below |
| `rtl/lane_merge.sv`, `rtl/lane_split.sv` | waveguides to port and back |
| `rtl/input_port.sv`, `rtl/output_port.sv` | batching and unpacking |
| `rtl/cyclic_xbar.sv` | both crossbars (`DIR` parameter) |
| `rtl/tail_sram.sv`, `rtl/head_sram.sv`, `rtl/voq_sram.sv` | SRAM modules |
| `rtl/hbm_ctrl.sv` | Parallel Frame Interleaving |
| `tb/hbm_model.sv` | behavioural HBM: sparse storage, checks ACT/PRE/tRCD/tRP/tFAW |
| `tb/tb_*.sv` | one self-checking testbench per block, plus the top |

Every module has the same kind of opening comment: what it does, its
interface and its timing, and which parts follow the reference design and
which are this design's own choices.

## 10. Simulating

Each testbench is self-contained and prints
`TB_RESULT checks=<n> failures=<m>`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/pfi_pkg.sv tb/tb_hbm_switch.sv \
          --top-module tb_hbm_switch -Mdir obj_hbm_switch -o sim
./obj_hbm_switch/sim
```

Swap in any other `tb_<block>`. Testbenches use `$urandom` and never read
files.

The tests and what they establish:

* **Block tests** (`tb_input_port`, `tb_cyclic_xbar`, `tb_tail_sram`,
  `tb_hbm_ctrl`, `tb_head_sram`, `tb_output_port`, `tb_lane_merge`,
  `tb_lane_split`, `tb_voq_sram`). Each compares the block with an
  independent model in the testbench. `tb_hbm_ctrl` checks every command
  against the schedule above: cycle, bank, row and column.
* **`tb_hbm_switch`** runs one switch at N = 4 with 4-cycle segments, so a
  frame is 16 batches. It sends random tagged traffic, then filler, then an
  overload. It checks:
  * every packet arrives unchanged, once, in order per fibre, on the right
    output, waveguide and wavelength;
  * the HBM model sees no timing violation and never more than gamma open
    banks;
  * each mechanism happens: frames written and read, several bank groups,
    all egress lanes used, drops under overload.
* **`tb_sps_router`** runs the whole router at N = 2, F = 8, H = 2. It
  additionally checks that each packet crosses the switch its ingress fibre
  is wired to, and that every egress fibre is used.
* **Default size.** The largest size the shipped testbenches simulate is
  `tb_sps_router` (N = 2, F = 8, H = 2) for the whole router and
  `tb_hbm_switch` (N = 4) for one switch. The top was also run once with every
  parameter at its default: 16 switches, 1024 fibres, 128 HBM channels per
  switch, one HBM model per switch. For 300 cycles all 1024 fibres sent
  tagged packets back to back to output ribbon 0.
  * Every switch formed a 512 KB frame, wrote it to HBM (128 beats), read it
    back, and delivered 659 to 703 packets.
  * All 10,888 delivered packets were intact, in order, and came through the
    right switch.
  * The HBM models saw no timing errors.
  * 7 packets were dropped, in `lane_merge`. That run included packets shorter
    than 128 bytes arriving back to back on every lane, which the merge does
    not sustain (section 7).

  Verilator takes about 7 minutes and 4 GB to build that model with 8
  compile jobs; the simulation takes 9 seconds. That test is not shipped: it
  cannot finish within a 10-minute build-and-run budget on a shared machine.

In the reduced tests, the input queues are enlarged (`IN_Q_BATCHES`) so that
they hold the same 8 KB per output as at full size. A batch shrinks with N,
so without this the queues would be far smaller than at full size.
