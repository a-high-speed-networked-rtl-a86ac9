# A packet-switched front end for a many-element radio telescope

A telescope built from hundreds of antenna elements produces a very large
stream of samples, and the interesting products (beams, spectra,
cross-correlations) need that stream reorganised many times: by time,
by frequency, and by pairs of elements. This design treats the signal path as
a small tree-shaped **packet network**. Every node of the tree does some local
processing and then sends self-describing packets to the next level; commodity
computers at the root do the rest. The RTL here covers the custom part of that
tree for one digitiser board:

```
 12 ADC channels ─► level 3 ──4 data links──► level 2 ──► level 1 ──► Gigabit Ethernet
   (10 bit)        code, flag,                 decode,      UDP frames,
                   packetise, route            pack pairs   time-slice destinations
                      ▲  │
        commands ─────┘  └──── status replies (control-and-monitor port)
```

Three ideas run through all of it:

* **Everything is a packet.** Data, status and commands share one format: a
  64-bit header word followed by 64-bit payload words. Nodes route by the
  header alone.
* **Downstream pulls.** A node only receives a packet on a link when it has
  asked for one, because it knows it can take the whole packet. If no output of
  a route is asking, the packet is dropped whole. Data are never lost in
  fragments, and the upstream timing is never disturbed.
* **Loss-tolerant coding close to the antenna.** Each 10-bit sample is recoded
  into 4 bits plus a flag bit through a lookup table. The table changes block by
  block with the signal power. Samples too large for the normal table are
  flagged and coded with a separate table. The packet header names the tables
  used, so a later node can undo the coding.

The top module is `nsps_path` (`rtl/nsps_path.sv`). It chains one level-3 node,
a level-2 receive buffer and decoder, and a level-1 Ethernet bridge on a
single clock.

## Packet format (`nsps_pkg`)

Every packet is a sequence of 64-bit words. Word 0 is the header
(`hdr_t`):

| bits    | field      | meaning                                               |
|---------|------------|-------------------------------------------------------|
| 63:56   | src_id     | node that produced (or last processed) the packet     |
| 55:52   | datatype   | DATA 1, STATUS 2, AYA 3, CMD 4, CALIB 5, CPLX 6       |
| 51:48   | pixel      | payload word layout: 0 plain, 5 five-bit, 6 complex   |
| 47:44   | streams    | number of independent streams in the payload          |
| 43:32   | pkt_size   | packet length in words, header included               |
| 31:0    | timestamp  | sample count of the first sample in the packet        |

The choice of fields is fixed by the architecture; their widths and the
encodings of datatype and pixel are this design's own. Inside a chip a packet
travels as a `beat_t` stream: one word plus start- and end-of-packet marks.

Payload layouts:

* **Coded data (DATA, pixel 5)**, 122 words for 12 channels × 120 samples.
  * Word 1 is an extension of the header. Bits `[2c+1:2c]` hold the normal
    table tag of channel c. Bits `[25:24]` hold the flag table tag.
  * Then come ten words per channel, channel after channel.
  * Each word carries twelve consecutive samples as 5-bit `{flag, code}`.
    Sample j of the word sits at bits `[5j+4:5j]`.
* **Complex data (CPLX, pixel 6)**, 361 words.
  * Channels 2k and 2k+1 form pair k. Each pair carries its 120 samples in
    time order, two samples per word.
  * Each sample is a 32-bit word `{real 16, imag 16}`. The earlier sample of a
    word is in bits `[63:32]`.
* **Commands (CMD, AYA)**, 2 words. Word 1 is `cmd_t`: `{target 8, opcode 8,
  addr 16, data 32}`. Target `8'hFF` addresses every node.
* **Status (STATUS)**, 3 words.
  * Word 1 is `{opcode, 7'b0, acq_on, addr, packets built}`.
  * Word 2 is `{block overruns, router drops}`.

## Level 3: the digitiser node (`nsps_l3_node`)

This node is the FPGA next to the ADCs. It contains six blocks.

### Block timing: `sequencer`

The sequencer counts samples into a 32-bit timestamp and cuts the sample
stream into blocks of 120 sample times.

* It marks the first and last sample of every block.
* `start`/`stop` commands take effect only at a block boundary, so packets
  are always whole.
* A `sync` pulse loads the timestamp from the time standard and restarts the
  block count. Acquisition then stays stopped until the next start.

### Coding: `lut_encoder` (one per channel)

Each channel has a RAM of `NUM_LUTS` = 4 tables with 1024 entries each. The
10-bit sample is the address.

* The channel's *normal* table (its tag) is chosen per block.
* A sample whose magnitude exceeds the flag threshold (448 at reset) is
  flagged. It is coded with the *flag* table instead (tag 3 at reset).
* At reset, table t holds `sat4(x >>> (3+t))`: table 0 suits weak signals and
  table 3 strong ones.
* Any entry can be rewritten by command (`OP_WR_LUT`). This makes the coding
  a configurable, table-driven requantiser rather than a fixed one.

### Table choice: `power_lut_select`

While a block comes in, this block adds up `x²` per channel. At the block end,
the energy is compared with three thresholds, and the count of thresholds
exceeded (0–3) becomes the channel's tag for the *next* block.

* The one-block delay is what lets the tags be written into the header
  before the payload.
* The thresholds default to `120·512·4^k` for k = 0, 1, 2. The factor of 4
  between them matches the factor of 2 in step size between tables.
* They can be set by command (`OP_SET_THR`).

### Buffering and packetising: `packet_builder`

The builder has two banks of 12 × 120 coded words. While one bank fills, the
other is sent out, already transposed to the channel-major layout above.

* The header is ready a few clocks after the last sample of a block.
* If a block completes while the other bank is still being sent, the new
  block is discarded and counted as an **overrun**.
* A packet costs 122 words plus one routing clock per 120 sample times. The
  node therefore keeps up as long as at most 120 of every 123 clocks carry a
  sample. At 100 Ms/s that means a clock of at least 102.5 MHz; 125 MHz is
  assumed. `tb_l3_full_rate` checks both the 100 Ms/s case and this limit.

### Switching: `packet_router`

This is a packet switch with two sources (packetiser and control replies) and
five outputs (four data links and a control-and-monitor port).

* A static table, indexed by datatype, gives the allowed outputs of each
  packet. DATA goes to the four links; STATUS and CALIB go to port 4.
  Entries can be changed with `OP_SET_ROUTE`.
* An output is used only while it raises `link_req`, which is the pull.
  Among the requesting outputs of a route, the choice goes round robin, so
  the four links share the data.
* If no output of the route is requesting, the whole packet is read out and
  dropped, and counted in `drops`.
* A port that asked must take the whole packet without further back-pressure.
  An assertion checks that only one port is active at a time.

### Commands and health: `control_agent`

The agent executes commands addressed to the node's id or to the broadcast
id, and answers each with an IAA ("I am alive") status packet.

* An AYA ("are you alive") query only produces that reply.
* Commands addressed to another node, or broadcast, are copied to the `fwd_*`
  port for nodes further down.
* The agent holds the configuration: source id, thresholds, flag magnitude and
  flag table, route table writes, table writes, and start/stop.
* Replies wait in a queue of four behind the one being sent, and leave in
  order. Their status words are taken when they are sent. Commands arriving
  faster than replies can leave are still executed, but a reply that finds
  the queue full is lost.

## Level 2: receive buffer and decoder

**`pkt_fifo`** is a store-and-forward packet buffer.

* Its `room` output (free space for one whole packet) is used directly as the
  pull request of all four data links.
* A packet that does not fit when its header arrives is dropped whole.
* Packets leave only once they are complete.

**`l2_decode_pack`** turns coded packets back into numbers.

* Each 5-bit word is decoded through a 4 × 16 table of 16-bit values. The
  table is chosen by the header's tags: the flag table if the flag bit is set,
  otherwise the channel's normal table.
* By default the value is `code · 2^(3+tag)`, the inverse of the default
  level-3 tables. Entries can be written through `dec_*`.
* Channels are packed in pairs as 32-bit complex samples, the layout expected
  by an FFT over sensor pairs.
* The source id is replaced by this node's id, because the data were changed.
* Packets with the wrong datatype, layout or size are consumed and counted in
  `pkts_bad`.

## Level 1: Ethernet bridge (`gige_bridge`)

The bridge buffers whole packets (4096 words) and sends each one as one UDP
datagram. It writes one byte per clock to an 8-bit MAC interface
(`tx_data/tx_valid/tx_last/tx_ready`).

* The 42-byte Ethernet/IPv4/UDP header is built from static fields in
  `bridge_cfg_t`, with the IPv4 header checksum computed on the fly.
* The UDP destination port is `port_base + datatype`, so each traffic type
  reaches the cluster on its own port.
* The destination MAC and IP rotate by time slice:
  `index = (timestamp >> slice_shift) & dest_mask`. Each cluster machine thus
  receives whole stretches of time. This is how load is shared across the
  cluster.
* Complex packets are 2930-byte frames, so the network must accept jumbo
  frames.

## The whole path (`nsps_path`) and its rates

In the top module, the level-3 data links end in the level-2 receive buffer,
which asks on all four links while it has room for a whole packet.

* The level-2 decoder feeds the bridge a packet at a time, and only while the
  bridge has room for a whole complex packet.
* Status replies come out on `cm_*`. `cm_req` is the pull request of the
  control-and-monitor network.
* One clock drives all levels. The fibre links between boards are direct
  connections.

The rates do not match, and the design is meant to cope with that:

| stage                               | needed (12 ch, 100 Ms/s) | built (125 MHz)    |
|-------------------------------------|--------------------------|--------------------|
| level-3 clocks (122 words + 1)      | 102.5 M/s                | 125 M/s            |
| level-3 links (5-bit data + header) | ≈ 6.4 Gb/s               | 4 × 2.5 Gb/s links |
| decoded complex data                | 19.2 Gb/s                | 8 Gb/s             |
| Gigabit Ethernet                    | 19.2 Gb/s                | 1 Gb/s             |

Past level 3, back-pressure fills the buffers, the links stop asking, and
level 3 drops whole blocks. In the full-size test, 26 of 229 acquired blocks
leave as frames. Every other block is accounted for as a pull drop (198) or an
overrun (5). In a full system, the data pooler's large memory and several
Ethernet ports absorb this (see below).

## Verification

Every block has a self-checking testbench in `tb/`. Each one compares the
block against values computed in the testbench itself. It ends by printing
`TB_RESULT checks=N failures=M`, and a watchdog ends a hung run.

| testbench           | what it covers |
|---------------------|----------------|
| `tb_sequencer`      | timestamps, block marks, start/stop at block ends, sync |
| `tb_lut_encoder`    | default tables, flag threshold and table, table writes |
| `tb_power_lut_select` | energy sums against three thresholds, one-block delay |
| `tb_packet_builder` | full packet layout, ping-pong, overruns, stalls |
| `tb_packet_router`  | route table, round robin, pull-only sending, whole-packet drop |
| `tb_control_agent`  | every opcode, targeting, broadcast forwarding, IAA contents |
| `tb_nsps_l3_node`   | the level-3 node at full size against a bit-exact model |
| `tb_l2_decode_pack` | decoding by tags and flags, pair packing, bad packets |
| `tb_gige_bridge`    | every frame byte, checksum, ports, destinations, drops when full |
| `tb_nsps_path`      | the whole path at default size, end to end (below) |
| `tb_l3_full_rate`   | level-3 node at 100 Ms/s and at its rate limit: no loss, even link use |

`tb_nsps_path` runs the top with no parameter overrides. It models the
level-3 coding bit-exactly, including the power-driven table choice, flags and
rewritten entries. It decodes and packs the model's words with its own copy of
the level-2 table, and then checks every byte of every Ethernet frame.

* It checks that every acquired block is either framed or counted as a drop
  or an overrun.
* It also checks that each mechanism happened at least once: flags, table
  switches, rewritten entries at both levels, start and stop, IAA replies,
  overruns, pull drops, MAC back-pressure, and all four destinations.

It takes a few seconds to build and well under a second to run.

To simulate with Verilator 5, for example:

```
verilator --binary --timing --timescale 1ns/1ps -Wno-fatal --top-module tb_nsps_path \
          -y rtl -y tb +libext+.sv rtl/nsps_pkg.sv tb/tb_nsps_path.sv
./obj_dir/Vtb_nsps_path
```

Use the same command for any other testbench. `-Wno-fatal` keeps Verilator's
width lint warnings (mostly in the testbench arithmetic) from stopping the build. The testbenches use only
`$urandom` and work in a two-state simulator.

## Where this design departs from the architecture, and its limits

* **Own choices.** Field widths, encodings, the command set, the reply
  contents, the extension word and the payload orders are all this design's
  own. So are the threshold rule (energy against three fixed thresholds,
  applied to the next block) and the default tables.
* **Level-2 width.** A level-2 card in the full system takes two level-3
  nodes (24 channels). Here one decoder serves one node (12 channels), so a
  24-channel card needs two instances.
* **One clock.** Everything runs on one clock. The serial transceivers, their
  link protocol, the ADCs and their clock synthesis are outside the RTL.
* **Table tags per channel.** The architecture names one normal and one flag
  table per packet. Because a packet here carries all twelve channels, each
  channel gets its own normal tag, and the flag table is shared.
* **Power over one block.** Table choice uses the energy of the single
  previous block. A longer integration window is not built; software can
  still steer the choice by rewriting the thresholds.
* **Replies can be lost.** Only five replies can be held while the
  control-and-monitor port is not pulling; a sixth command is executed but
  not answered.
* **Bridge simplifications.** The bridge sends one NSPS packet per frame. It
  sends the UDP checksum as zero and uses no ARP or other protocol handling.
  Its buffer is on-chip, not the board's DDR2 memory.

## Not built

* **The level-2 FFT stage.** The architecture splits a 1024-point FFT of each
  sensor pair into a radix-64 stage at level 2 and the remaining 16-point
  transforms at level 1, but gives no word widths, scaling or output order.
  It also needs unbroken 1024-sample stretches, which the whole-block drops of
  this path do not guarantee. The complex packets of
  `l2_decode_pack` are laid out as its input.
* **The data pooler.** It gathers packets from several level-2 cards into
  large time slices in DDR2 memory.
* **Parts outside the logic.** The ADCs, clock synthesis, transceivers,
  Ethernet MAC/PHY, DRAM, network switches and the computer cluster at the
  root.
