# A four-stage FPGA corner-turn for a 2048-input radio correlator

An FX correlator first channelizes each antenna input (the F-engine). It
then needs, for every frequency channel, the samples of all inputs in one
place (the X-engine, here GPU nodes). Going from "all channels of one input"
to "one channel of all inputs" is the *corner-turn*. The whole digitized
band passes through it. For 2048 inputs, 1024 channels, 400 MHz and 4+4-bit
samples, that is about 6.6 Tbit/s.

This RTL builds the corner-turn inside the FPGA of each digitizer board. It
uses no switch: the reordering is spread over three hops between FPGAs plus
one hop to the GPU nodes. Each hop exchanges data among a small group of
peers over dedicated point-to-point links.

| stage | where | in (per board) | out (per board) |
|---|---|---|---|
| 1 | inside the FPGA | 16 channelizers, 1024 channels x 1 input | 16 streams, 64 ch x 16 inputs; stream *s* goes to the board in slot *s* |
| 2 | backplane full mesh, 16 boards | 16 lanes (15 links + local), 64 ch x 16 inputs | 8 streams, 8 ch x 256 inputs; 4 stay, 4 go to the paired crate |
| 3 | 4 links to the same slot in the paired crate | 4 local + 4 remote lanes, 8 ch x 256 inputs | 8 streams, 4 ch x 512 inputs |
| 4 | 8 x 10G Ethernet (UDP) | | each stream to one GPU node |

After stage 3, a board in slot *s* of either crate holds, for its 32 channels
(4 per GPU link), every input of the crate pair. Four crate pairs give the
2048 inputs.

## One stage module for all three stages (`ct_stage`)

Every stage has the same parts:

* a **frame aligner** (`ct_frame_aligner`);
* a decoder that tells, for every 32-bit word of the aligned input, which
  frame, channel and input each byte or bit belongs to;
* a programmable **channel table** (`ct_channel_map`);
* one **channel selector** (`ct_channel_selector`) per output stream.

Only the parameters change between stages:

| stage | `N_IN` | `CH_GROUPS` | `C_IN` | `A_IN` | `N_OUT` | `C_OUT` |
|---|---|---|---|---|---|---|
| 1 | 16 | 1 | 1024 | 1 | 16 | 64 |
| 2 | 16 | 1 | 64 | 16 | 8 | 8 |
| 3 | 8 | 4 | 8 | 256 | 8 | 4 |

Stage 3 is the odd one, and `CH_GROUPS` exists for it:

* Lanes 0-3 carry four *different* channel sets (the four local stage-2
  streams) of one crate.
* Lanes 4-7 carry the *same* four channel sets from the other crate.

So lanes are split into antenna groups of `CH_GROUPS` lanes:

* lane *l* belongs to antenna group `l / CH_GROUPS`;
* lane *l* carries channel set `l % CH_GROUPS`;
* the table key is `(l % CH_GROUPS) * C_IN + channel`.

The output of a stage places the inputs of the enabled antenna groups one
after another. `grp_en` turns groups off, which is how the bypass modes work
(below).

### Frame alignment

The sources transmit synchronously, so the packets of one frame arrive
within a few tens of clocks of each other. The aligner buffers each lane in
a small FIFO (`DEPTH` = 128 words) and waits until every enabled lane shows a
header with the same 48-bit frame counter. It then releases all lanes in
lockstep, one word per lane per clock. Some lanes may not arrive:

* The newest counter seen is the target. Packets with an older counter are
  flushed.
* If some lanes are still missing `TIMEOUT` (96) clocks after the first
  header, the aligner gives up on them. It streams the others and marks the
  missing lanes in `a_lost`.

The stage replaces a lost lane's data by zeros. It sets all of that lane's
saturation flags and both of its ADC/FFT flags. The status word counts the
missing lane. The GPU side therefore sees missing data as flagged data and
never waits.

A link packet that failed its CRC is not dropped. It is forwarded with its
error bit set, and the stage sets the error bit of the status word.

### Channel selector and its buffer

A selector sees the decoded elements of every aligned word, with the table
entry of each element. It keeps those whose entry names its stream and
writes them into a local buffer at their final place:

```
data byte / saturation bit:  index = (frame*C_OUT + slot)*A_OUT + input
ADC/FFT flag pair:           index = frame*A_OUT + input
```

`A_OUT` is the number of inputs of the enabled groups. A packet therefore
leaves as contiguous blocks, in this order:

* header (4 words);
* all data bytes, grouped by channel;
* all saturation bits;
* all ADC/FFT flag pairs;
* one status word.

The buffer has two banks. One fills while the other is sent.

`frames_out` (1 to 4) frames are combined into one packet. This matters for
the GPU links: a stage-3 packet of one frame takes 613 words plus 17
Ethernet words, which is more than the 615 clocks of a 2.56 us frame at
240 MHz. With 4 frames per packet it takes 2454 words per 4 frames, which
fits.

If a bank completes while the other bank is still being sent, the new packet
is dropped. The drop is counted, and the overflow bit of this stage is set
in the next packet's status word. The output is AXI-Stream-like
(`m_valid/m_ready/m_data/m_last`) at one word per clock. `m_len` gives the
packet length from the first word on.

### Packet format

All words are 32 bits. The first byte in time is bits 7:0.

```
word 0  [31:30] stage  [29:26] crate  [25:22] slot  [21:16] lane
        [15:12] protocol (1)  [11:8] header words (4)  [7:0] 0xC5
word 1  [31:28] encoding (1 = 4+4 bit)  [27:24] frames
        [23:12] channels  [11:0] inputs
word 2  [31:16] reserved  [15:0] frame counter [47:32]
word 3  frame counter [31:0] of the first frame
data    frames x channels x inputs bytes, input fastest, 4 per word
flags   1 bit per data byte, same order, 32 per word, zero padded
adc     2 bits per input per frame, 16 per word, zero padded
status  [3:0] lost lane at stage 1..4   [7:4] CRC error at stage 1..4
        [11:8] buffer overflow at stage 1..4   [31:16] lost-lane count (saturating)
```

A stage ORs the status bits of all its input lanes, adds up their counts,
and adds its own events. The GPU therefore sees the history of the whole
path.

## Links

* **Backplane and inter-crate links** (`ct_link_tx`, `ct_link_rx`) use a
  reduced 10G-Ethernet-style code on a 32-bit data + 4-bit control word:
  start word `FB 55 55 55`, the payload, one CRC-32 word (Ethernet
  polynomial), a terminate word `FD 07 07 07`, then at least one idle word.
  There is no MAC header and no preamble. If the source pauses, idle words
  are inserted inside a packet; the receiver skips them. The receiver holds
  back two words, so the CRC word is never forwarded.
* **GPU links** (`ct_eth_tx`) are transmit-only UDP over 10G Ethernet:
  preamble, Ethernet/IPv4/UDP header (42 bytes), the packet as payload, FCS,
  and a minimum gap. The 42-byte header puts the payload 2 bytes off the
  32-bit grid, so each output word joins the upper half of one input word
  and the lower half of the next. The IP checksum is computed. The UDP
  checksum is 0, which IPv4 allows. Frames of 4 combined stage-3 frames are
  about 9.8 kB, so the receivers must accept jumbo frames.

The serializers, the 64b/66b coding and the clock crossings are outside the
RTL. The top's link ports are the 32-bit words that would go to the
transceivers. Everything runs on one 240 MHz clock.

## The board top (`ice_ct_top`)

* Stage-1 stream *s* goes to mesh link *s*. The stream for the board's own
  slot feeds stage-2 lane `slot_id` directly. Mesh link *l* feeds stage-2
  lane *l*.
* Stage-2 streams 0-3 feed stage-3 lanes (local group). Streams 4-7 leave
  on the four QSFP links.
* The received QSFP links fill the other stage-3 group.
* In the even crate (crate_id[0] = 0) the local group is group 0, so the
  even crate's inputs come first in every GPU packet.

**The odd crate's table.** The two boards of a pair must keep different
halves of the slot's 64 channels. The odd crate therefore loads its stage-2
table so that streams 0-3 carry channels 32-63 and streams 4-7 carry
channels 0-31. In the odd crate, write stage-2 key *k* (0..63) as
`{valid 1, dest ((k/8)+4)%8, slot k%8}`. The even crate keeps the reset
table. All tables reset to contiguous blocks: key *k* goes to stream
`k / C_OUT`, slot `k % C_OUT`.

**Modes** (`mode`, change only between frames):

| mode | configuration | what changes |
|---|---|---|
| 2 | dual crate, 512 inputs | full path |
| 1 | single crate, 256 inputs | stage 3 bypassed; stage-2 streams go straight to the 8 GPU links; QSFP links idle |
| 0 | single board, 16 inputs | as 1, and stage 2 enables only the local lane (mesh lanes ignored) |

## Rates at the default size

One frame is 2.56 us, i.e. 615 clocks at 240 MHz.

| link | words per frame | load |
|---|---|---|
| stage-1 lane / backplane link | 294 (+3 link words) | 3.7 Gbit/s |
| stage-2 stream / QSFP link | 597 (+3) | 7.5 Gbit/s |
| stage-3 stream / GPU link, 1 frame per packet | 613 (+17) | does not fit |
| stage-3 stream / GPU link, 4 frames per packet | 613.5 | fits |

The end-to-end testbench runs four frames at this exact rate in dual-crate
mode and requires that no packet is lost.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
`tb/ct_tb_pkg.sv` is the reference model. The channelizer test pattern is a
fixed function of (input, channel, frame). Because of this, the expected
content of any packet at any stage is built from a list of global channel
numbers and a list of global input numbers, independently of the RTL. The
package also holds a bit-serial CRC-32.

```
verilator --binary --timing -Irtl -Itb rtl/ct_pkg.sv tb/ct_tb_pkg.sv \
    rtl/ct_*.sv rtl/ice_ct_top.sv tb/tb_ice_ct_top.sv --top-module tb_ice_ct_top
./obj_dir/Vtb_ice_ct_top
```

The same pattern works for the block testbenches: `tb_ct_link_tx`,
`tb_ct_link_rx`, `tb_ct_frame_aligner`, `tb_ct_channel_map`,
`tb_ct_channel_selector`, `tb_ct_stage` and `tb_ct_eth_tx`.

`tb_ice_ct_top` runs the top at its full default size. Building it takes
about 7 minutes; running it takes seconds. The testbench plays crate 0, slot
5 and drives every neighbour:

* the 15 mesh links, with what the other boards' stage 1 would send;
* the 4 QSFP links, with crate 1's stage-2 streams, which carry channels
  0-31 because of crate 1's swapped table.

It decodes every Ethernet frame and compares it word for word with the
model. It covers:

* lane skew;
* a lost lane;
* a CRC error;
* 4-frame combining;
* stalls;
* a buffer overflow;
* switches to single-crate and single-board mode.

It counts each of these and fails if one never happened.

## Departures and limits

* **What is given and what is chosen.** The following follow the
  design as described: the stage geometry, the 48-bit frame counter, the
  header contents, the status word after every packet, the 1-bit saturation
  flags, the per-channelizer ADC/FFT overflow flags, the combining of up to
  4 frames, and the three bypass configurations. The following are this
  design's choices: the exact bit layout of the header and status word, the
  2-bit ADC/FFT flag, the element order inside the blocks, the
  drop-on-overflow policy, and the table format.
* Only the two-crate stage 3 is built. The three- and five-crate inter-crate
  layouts would need a differently wired stage 3.
* The odd crate's table must be loaded by software; the reset table suits
  the even crate.
* Full-size logic synthesis with yosys was not completed in the time
  available.
