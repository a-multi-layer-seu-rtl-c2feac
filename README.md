# Trigger-packet router for the ATLAS NSW sTGC trigger path, with in-fabric upset mitigation

The sTGC trigger router sits on the rim of the ATLAS New Small Wheel. It takes
twelve 4.8 Gb/s serial links from three front-end boards (FEBs, four links
each), throws away the NULL packets that make up most of the traffic, and
passes the data packets on over four 4.8 Gb/s optical links to the trigger
processor (TP). It is built in a commodity SRAM-based FPGA (Xilinx Artix-7),
so radiation-induced single-event upsets (SEUs) are the main threat to it. The
published design answers with three layers of protection:

1. inside the FPGA: triple modular redundancy (TMR) on the control state of the
   user logic, plus the vendor's soft-error-mitigation core scrubbing the
   configuration memory;
2. multi-boot auto reconfiguration (mBAR): the board flash holds six
   independent copies of the firmware, and on request the FPGA reloads itself
   from the next copy, in seconds rather than the minutes a reload over slow
   control takes;
3. a power cycle of the board, ordered by the back-end controllers when the
   first two layers do not help.

This repository holds synthesizable SystemVerilog for the router's user logic
(the data path between the transceivers) and for the two parts of the
mitigation that live in that logic: the TMR registers and the multi-boot
controller. It also holds self-checking testbenches, including one that runs
the whole 12-in/4-out router end to end.

## Data path at a glance

```
 240 MHz          160 MHz core clock                                  240 MHz
 20 bit    +----------------+  +-----------+        +---------+  +---------+  +----------------+  20 bit
 RX #0 --->| packet_decoder |->|descrambler|-+----->|         |->|scrambler|->| packet_builder |---> TX #0
   ...     |  (buffer+align)|  |           | |      | packet_ |  +---------+  | (ID + gearbox) |     ...
 RX #11 -->|   x12          |  |   x12     | |      | switch  |     x4        |      x4        |---> TX #3
           +----------------+  +-----------+ |      | 12 -> 4 |               +----------------+
                                             +-> payload_checker x12 (test-payload flags)
```

| stage | block | width / clock | what happens |
|---|---|---|---|
| 1 | transceiver receiver (outside) | 20 bit @ 240 MHz | 4.8 Gb/s deserialised |
| 2 | `packet_decoder` | 20 bit in, 30 bit @ 160 MHz out | buffered into the core clock, packet boundary found |
| 3 | `descrambler` | 30 bit @ 160 MHz | payload restored |
| 4 | `packet_switch` | 12 x 30 bit in, 4 x 30 bit out | NULL packets dropped, data packets forwarded |
| 5 | `scrambler` | 30 bit @ 160 MHz | payload scrambled again |
| 6 | `packet_builder` | 30 bit in, 20 bit @ 240 MHz out | idle slots filled with the router ID, geared to the transmitter |
| 7 | transceiver transmitter (outside) | 20 bit @ 240 MHz | 4.8 Gb/s serialised |

Both clock rates carry exactly 4.8 Gb/s per link: 20 x 240 MHz = 30 x 160 MHz.
The 3:2 clock ratio is what the two gearboxes rely on. Each gearbox groups 60
bits, which is three transceiver words or two packets, and hands the group
across the clock boundary through a gray-pointer dual-clock FIFO (`cdc_fifo`).
The 240 MHz side moves one group every three clocks and the 160 MHz side one
every two, so the FIFO fill stays constant once it is primed.

## Packets

An FEB packet has 30 bits. Bits [29:26] are the header: `1010` for a data
packet, `1100` for a NULL packet. Bits [25:0] are the payload, which the FEB
scrambles for DC balance. Headers are sent in clear, so the router can sort
packets without descrambling them. Throughout the design the stream is sent
most-significant bit first: bit 19 of a transceiver word and bit 29 of a
packet go first.

The published description does not name the scrambler. This implementation
uses the self-synchronising scrambler with polynomial 1 + x^39 + x^58, the one
used by 64b/66b Ethernet. It runs over the serial stream of payload bits only.
It is self-synchronising, so a receiver needs no seed and no reset handshake:
once it has seen 58 payload bits (a little under three packets), every later
bit comes out right. There is a price. A single flipped bit on the line
becomes three flipped output bits: at its own position, 39 bits later and 58
bits later. The functions `scramble()` and `descramble()` in `router_pkg` hold
the parallel form, 26 bits per clock.

On the input side every packet is descrambled, NULL packets included, because
the FEB scrambles them all. On the output side only the data packets that
were forwarded are scrambled. The TP therefore descrambles the data-packet
stream of each link and ignores the ID packets.

## Finding the packet boundary (`packet_decoder`)

This is the least obvious part. The receiver puts out 20-bit words with no
idea where a 30-bit packet starts. A packet boundary falls at one of 30
possible bit positions, and the header patterns are the only thing that marks
it.

The decoder works on 60-bit chunks, which always hold exactly two packets.
Call the chunk before the newest one the previous chunk. It keeps that chunk
and forms a 120-bit window: the previous chunk followed by the newest. Let
`hdr_pos` be the current guess of the boundary. The decoder cuts two packets
out of the window, one starting `hdr_pos` bits into the previous chunk and one
starting 30 bits later. Both fit inside the window for any `hdr_pos` in 0..29.
The next chunk then yields the next two packets, so no packet is taken twice
or skipped.

Lock is a small state machine:

- **Hunting.** The chunk is good if both cut packets carry a legal header
  (`1010` or `1100`). A good chunk increments a counter. A bad chunk clears
  the counter and moves `hdr_pos` by one bit. After `LOCK_GOOD` (8) good
  chunks in a row, that is 16 legal headers, the link is locked.
- **Locked.** Packets go out, one per 160 MHz clock. After `LOCK_BAD` (4) bad
  chunks in a row the link unlocks and hunting resumes one bit further on.

A random 4-bit field is legal with probability 1/8. A false lock therefore
needs 16 legal headers in a row by chance, which has probability 8^-16.
Hunting tries at most 30 positions, so from a cold start the link locks
within about 40 chunks (0.5 us).

`hdr_pos` is reported for every link. During the radiation tests this value
was watched from outside: a link whose header position changes has lost
synchronisation. The testbench counts exactly this (see below).

The lock flag, the position and the two counters are control state. The
decoder keeps them in a `tmr_reg` (next section). The packet data itself is
not triplicated: an upset data bit costs one packet, and the trigger recovers
from that by using the redundancy of the detector's several layers.

## NULL suppression and switching (`packet_switch`)

The published design says that the switch drops NULL packets and sends data
packets from 12 inputs to 4 outputs. How the inputs map to the outputs is not
given. Here output *k* serves inputs *k*, *k*+4 and *k*+8, which is link *k*
of each of the three FEBs. Each input has a 4-entry queue of data packets.
Each output takes one packet per clock from its three queues in round-robin
order. An output runs at the same 4.8 Gb/s as an input, so the three inputs
of a group can carry at most one data packet per clock between them on
average, a data occupancy of 33% per link. Short bursts above that are
absorbed by the queues. Past that, data packets are dropped, and each drop is
counted in `drop_count`. NULL packets are counted in `null_count`. Packets
with an illegal header (possible only while a link is losing lock) are
discarded.

## Router ID and output gearing (`packet_builder`)

Every core clock each output sends something. If the switch has a data packet
for that output, the data packet goes out. Otherwise an ID packet goes out,
carrying the router's identification number. The TP uses the ID to check that
the link it is listening to is the router it expects. The ID packet format
here is this implementation's own: header `1100`, payload `{18'b0, router_id}`,
sent unscrambled.

Two packets make a 60-bit chunk, which crosses to the 240 MHz transmitter
clock. The transmitter side waits until two chunks are buffered, sends zero
words until then, and afterwards takes one chunk every three clocks.
`underflow` is a sticky flag that is set if the buffer ever runs dry. With
locked clocks it never does.

## Upset mitigation in the logic

**TMR with three voters (`tmr_reg`, `tmr_voter`).** A protected state
machine is built three times, as three domains. Each domain has:

- its own copy of the state register;
- its own majority voter over all three copies;
- its own next-state logic, which reads only that voter.

A copy that is not loaded in a clock reloads its own voter's output.

- An upset in one copy is outvoted at once and scrubbed on the next clock.
- An upset in one domain's voter or next-state logic spoils only that
  domain's copy, and the other two outvote it.
- Two copies upset in the same bit before a clock edge win the vote. No TMR
  protects against that.

Two state machines are protected this way:

- the alignment state machine of every `packet_decoder`, including its
  header check;
- the sequence state machine of the `mbar_controller`.

The data path is not triplicated. It follows domain 0.

A synthesis tool sees three identical copies and would merge them back into
one. The copies and the per-domain next states therefore carry `keep` and
`dont_touch` attributes. Check in the implemented netlist that the
triplication survived.

**Multi-boot controller (`mbar_controller`).** Six firmware copies sit in the
256 Mb configuration flash, every `SLOT_BYTES` = 5 MiB (40 Mb). A compressed
image is about 32 Mb, so it fits a slot. There is no "golden" fallback image:
all six copies are equal, and they are used in turn. On `trigger`, which comes
from slow control, the controller works out the next copy from `cur_image`:
(cur + 1) mod 6. It then writes the FPGA's internal configuration port on
eight consecutive clocks:

| word | value |
|---|---|
| dummy | `FFFFFFFF` |
| sync | `AA995566` |
| NOOP | `20000000` |
| write WBSTAR | `30020001` |
| start address of the copy | copy x `00500000` |
| write CMD | `30008001` |
| IPROG | `0000000F` |
| NOOP | `20000000` |

The words follow the Xilinx 7-series configuration guide, including its rule
that the bits within each byte are reversed at the port (`icap_i`; the
unreversed word is on `icap_word`). After IPROG the FPGA reloads from the new
address, and all logic state, this controller's included, is lost. That is
why the index of the loaded copy is an input. The slow-control side keeps
track of it, and the remote controller of the test setup displays it too.

**Not in this RTL.** The soft-error-mitigation core (vendor IP that scrubs the
configuration memory) and the power cycling of the third layer (board-level,
ordered by the back-end controllers) have no RTL here. Neither does the
decision of *when* to reconfigure or power-cycle. That decision is taken
outside the FPGA from the status this logic reports: lock flags, header
positions, checker flags and counters.

## Test-payload checker and link-loss indicators (`payload_checker`)

In the radiation tests each FEB emulator sends test payloads of 104 bits. A
payload is split over four data frames of 26 payload bits each. It is read as
13 bytes, and from one payload to the next each byte advances by a fixed
increment of its own. After the descrambler, the router rebuilds every
payload and checks each byte against the previous payload's byte plus the
increment. The 13-bit flag word it reports has a 1 for each good byte and a
0 for each bad one. The published description does not give the increments
or the framing, so both are chosen here:

- byte *g*, counting from the least significant byte, advances by *g*+1;
- a payload starts at the first data frame after a NULL packet, and the first
  frame received is the most significant.

The first payload after reset, after a short payload or after an illegal
header is only learnt as the reference; it is not checked. A corrupted payload becomes the reference for
the next one, so the same byte is flagged twice.

The test system declared a link lost when any of three indicators changed and
stayed changed for five minutes:

1. a link's header position;
2. the router's or the TP's checker flags;
3. the router ID as seen by the TP.

The end-to-end testbench watches the same three indicators. It only counts
their changes, because five minutes cannot be simulated.

## Parameters

| module | parameter | default | origin |
|---|---|---|---|
| `router_top`, `packet_switch` | `N_IN`, `N_OUT` | 12, 4 | published |
| `payload_checker` | `N_GROUPS`, `FRAMES` | 13, 4 | published |
| `mbar_controller` | `N_COPIES` | 6 | published |
| `mbar_controller` | `SLOT_BYTES` | 5 MiB | own choice |
| `packet_decoder` | `LOCK_GOOD`, `LOCK_BAD` | 8, 4 | own choice |
| `packet_decoder`, `packet_builder` | `FIFO_DEPTH` | 8 | own choice (power of two, at least 4) |
| `packet_switch` | `FIFO_DEPTH` | 4 | own choice |
| `packet_builder` | `ID_WIDTH` | 8 | own choice |

## Where this design departs from, or adds to, the published one

The published material gives these points: the stage structure, the widths
(20/30 bits), the clocks (240/160 MHz), the header patterns, the 12-to-4
switching with NULL suppression, the router-ID idle packets, the 104-bit /
13-flag test payload, TMR with three voters on control state, and six
flash copies loaded in sequence. Everything below is this implementation's
own:

- the scrambler polynomial and bit order;
- the chunk-window alignment and its lock thresholds;
- the input-to-output mapping, the queue depth, the round-robin order and the
  drop-on-full policy of the switch;
- the ID packet format, and the choice to send only data packets and ID
  packets to the TP;
- the payload increments and the payload framing;
- the flash slot size and the external `cur_image`;
- one shared 240 MHz clock for all receivers, and one for all transmitters.
  Real transceivers may each recover their own clock; the dual-clock FIFOs
  would accept that unchanged, but the design has only been simulated with
  the shared clocks.

Two rules of the design are written as assertions: the decoder's and the
builder's FIFOs never overflow.

Absent from the RTL: the transceivers, clock managers,
soft-error-mitigation core, flash, slow-control interface, optical drivers,
power switching, and all test equipment. At `router_top` their signals appear
as ports: `rx_data`, `tx_data`, the clocks, `mbar_trigger`/`cur_image`,
`icap_*`, and the status outputs.

## Simulating

Every testbench is self-checking. It prints one line,
`TB_RESULT checks=N failures=M`, and stops itself through a watchdog if it
hangs. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module router_top_tb rtl/router_pkg.sv tb/tb_ref_pkg.sv tb/router_top_tb.sv
./obj_dir/Vrouter_top_tb
```

Replace `router_top_tb` with any other testbench: `tmr_reg_tb`,
`packet_decoder_tb`, `descrambler_tb`, `packet_switch_tb`, `scrambler_tb`,
`packet_builder_tb`, `payload_checker_tb`, `mbar_controller_tb` or
`seu_campaign_tb`. All of them
run in seconds.

`router_top_tb` runs the full-size router (12 links in, 4 out, all defaults)
for about 31 us of simulated time. It drives twelve `feb_emulator` models with
random bit offsets and about 27% data occupancy. A model of the TP
reassembles the output words, descrambles them and checks every data packet
against the frames its three source links sent, in order. It also checks every
idle packet for the router ID. Along the way it makes each mechanism happen at
least once and counts it:

- link lock;
- NULL suppression;
- ID insertion;
- switch overflow, from a flood on one output group;
- loss of lock and relock after a 5-bit slip;
- a corrupted frame flagged by the checker;
- a router-ID change seen at the TP;
- a single TMR upset that is outvoted;
- a complete multi-boot port sequence.

`seu_campaign_tb` plays the role of a beam run on the same full-size router.
It injects about 240 upsets at random:

- single upsets in one TMR copy of a link's alignment state or of the
  multi-boot state;
- double upsets, the same bit in two copies, which TMR cannot hide;
- once, a receiver output held at zero, which stands for a failed hard IP
  core.

The link-loss rule is applied per link: a link is bad while it is unlocked or
its header position has moved. A link that stays bad for 1500 clocks counts
as an SEU failure; this is the five-minute rule of the beam tests, scaled to
clocks. A failure is answered the way the second layer answers it: a
multi-boot request, then a reset of the router that stands for the reload.
The test expects the following:

- no failure from single upsets;
- only short-lived indicator events from double upsets, since the link
  relocks by itself within about 80 clocks;
- exactly one failure, the stuck receiver, repaired by the reload.

The clocks in these testbenches have periods of 4 ns and 6 ns. That keeps
the exact 3:2 ratio, about 4% faster than 240/160 MHz. Measured end to end, a
data frame needs 21 to 31 core clocks, from the front-end model generating it
to the trigger-processor model reassembling it. The spread comes from
waiting in the switch queue.

The testbenches read no files. The reference scrambler in `tb/tb_ref_pkg.sv`
is bit-serial and written independently of the RTL's parallel one.

## Files

- `rtl/router_pkg.sv`: packet constants and types, scrambler functions
- `rtl/router_top.sv`: the router user logic
- `rtl/packet_decoder.sv`, `rtl/descrambler.sv`, `rtl/packet_switch.sv`,
  `rtl/scrambler.sv`, `rtl/packet_builder.sv`, `rtl/payload_checker.sv`: data
  path stages
- `rtl/mbar_controller.sv`: multi-boot reconfiguration
- `rtl/tmr_reg.sv`, `rtl/tmr_voter.sv`: TMR register with three voters
- `rtl/cdc_fifo.sv`: dual-clock FIFO
- `tb/*_tb.sv`: testbenches (`router_top_tb` end to end, `seu_campaign_tb`
  upset campaign)
- `tb/feb_emulator.sv`, `tb/tb_ref_pkg.sv`: front-end model and reference
  functions
