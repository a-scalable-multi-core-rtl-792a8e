# DYNAPs event routing fabric: two-stage tag routing for a four-core spiking-neuron chip

A chip of spiking neurons has to deliver every spike ("address-event") to
hundreds or thousands of synapses, on the same chip and on other chips. If
every synapse stored the full address of its source, or every neuron stored the
addresses of all its targets, the routing memory would grow like
`F·log2(N)` bits per neuron (fan-out `F`, network size `N`). This design uses
a two-stage scheme instead:

1. **Source stage (point to point).** Each neuron owns a handful of words in
   a small SRAM next to its core. A word says *which cluster* to send the spike
   to: a core on this chip or on a chip some hops away in a 2D mesh. It also
   carries a 10-bit **tag** that stands for the spike from then on.
2. **Target stage (broadcast).** The destination core broadcasts the tag to
   all of its neurons. Each neuron has 64 content-addressable (CAM) words, one
   per synapse, each holding the tag it listens to. Every word that matches
   sends one pulse to the synapse type stored next to the tag.

Tags are only unique within one core, so 10 bits suffice however large the
network grows. A neuron needs 4 source words (4 × 20 bits) and 64 target
words (64 × 12 bits). Even so, it reaches up to 4 cores × 256 neurons through
each of its 4 source words (fan-out 4k), with a fan-in of 64.

The RTL here is the digital part of one chip:

- four cores of 16 × 16 neurons;
- three levels of routers: R1 per core, R2 per chip, R3 for the mesh;
- the host input decoder.

The neurons, synapse filters, pulse extenders and bias DACs are analog
circuits. They stay outside as ports.

## Numbers at a glance

| Quantity | Value | Where |
|---|---|---|
| Cores per chip / neurons per core | 4 / 256 (16 × 16) | `dynaps_chip`, `dynaps_core` |
| CAM words per neuron | 64; 10-bit tag + 2-bit synapse type | `cam_array` |
| Synapse types | 0 fast exc., 1 slow exc., 2 subtractive inh., 3 shunting inh. | `syn_decoder` |
| Source memory per core | 1024 × 20 bit = 4 words per neuron | `r1_sram` |
| Routing packet | 20 bit | `dynaps_pkg::route_pkt_t` |
| Mesh reach | ±3 chips in x and in y | `r3_router` |
| Host word / core programming / core config / bias word | 34 / 28 / 12 / 23 bit | `input_interface` |
| Memory bits per chip | 786,432 CAM + 81,920 SRAM | |

## The routing packet

```
 19   18   17:16  15:14  13:10       9:0
 sy   sx   dy     dx     core_mask   tag
```

- **`dx`, `dy`** are the remaining hops in x and y (0 to 3). `sx` = 1 means
  east and 0 west; `sy` = 1 means north and 0 south.
- **`core_mask`** has one bit per core of the destination chip. A word with
  mask `0110` is delivered to cores 1 and 2.
- **`tag`** is the only part that reaches a core.

A source word with zero offset and mask 0 is an *empty entry*: R1 drops it.
After reset every source word is empty, so an unprogrammed neuron sends
nothing.

Only the field widths come from the original design. The order of the fields
is this implementation's choice, and so is reading the 4-bit core field as a
mask rather than an index.

## Life of a spike

```
neuron ──req/ack──► address encoder ──8-bit neuron id──► R1 ──┬──► tag back to own core (local)
                                                              └──► R2 ──┬──► other cores of this chip
                                                                        └──► R3 ──► mesh ──► R3 ──► R2 ──► cores
each core: tag ──► CAM search over 256 neurons × 64 words ──► match pulses ──► synapse decoder ──► syn_pulse
```

1. **Neuron handshake and encoder (`aer_encoder`).**
   - A neuron raises `nrn_req` and holds it until `nrn_ack`.
   - A round-robin arbiter picks one pending row, then one pending column in
     that row. The chosen address `{row, col}` goes into an output register.
   - The neuron is acknowledged, drops its request, and `nrn_ack` falls. This
     is a four-phase handshake.
2. **R1, the per-core router.** It reads the neuron's four source words,
   slot 3, 2, 1, 0 (see the next section). Each word goes to one of three
   places:
   - **Back to the own core** when the offset is zero and the mask is exactly
     this core.
   - **Nowhere** when the word is empty.
   - **Up to R2** in every other case.

   R1 also merges the tags coming down from R2 with its local tags into the
   core's input.
3. **R2, the chip router.**
   - A 4-way merge takes the four R1 streams, and a 2-way merge adds packets
     from the host.
   - After a buffer, a check on `dx = dy = 0` splits the stream:
     - packets for this chip go to a *mask split*, which offers the packet to
       every core whose mask bit is set and consumes it when all have taken
       it;
     - everything else goes to R3.
   - Packets arriving from R3 go through a second mask split.
   - Per core, a 2-way merge joins the two split trees.
4. **R3, the mesh router.** It routes X first, then Y, on relative offsets,
   and decrements one offset per hop. A packet that reaches zero offset is
   handed to the local R2. See "R3 and the mesh" below.
5. **Core.**
   - The CAM array searches every word of every neuron for the tag.
   - Each match pulses the neuron's synapse of the type stored with the
     matching word.

## R1 and its memory address loop

R1 is the least obvious block. The neuron id from the encoder gets a 2-bit
header appended, the value 3, meaning "three more words after this one". The
token `{neuron, header}` then circulates in a small ring:

```
new event ─► MERGE ─► BUF ─► SPLIT ─┬─► SRAM read at {neuron, header} ─► 3-way split (R2 / own core / drop)
               ▲                    └─► CPASS (header ≠ 0) ─► DEC (header−1, buffered) ─┐
               └────────────────────────────────────────────────────────────────────────┘
```

Each pass reads one SRAM word. The controlled pass kills the loop copy once
the header is 0, so an event reads exactly four words.

Two rules keep the ring live:

- **The decrement is a pipeline stage of its own.** With one storage place in
  the ring, the loop copy could never re-enter the buffer that still holds its
  own original.
- **A new event enters only when the decrement stage and the loop buffer are
  both empty.** Otherwise a new token next to a circulating one fills both
  places and the ring deadlocks. It also means the merge never stalls on a new
  event, so that request is never withdrawn while granted.

As a result, R1 serves one neuron event at a time: four SRAM reads in about 8
cycles when nothing downstream stalls. The testbench checks that an isolated
event's four reads all finish within 12 cycles.

## R2 and the core mask

R2 has one level, which is enough for one four-core chip. The mask splits
(`qdi_mask_split`) are what give the scheme its breadth: one source word can
reach any subset of the four cores of its target chip. A mask split:

- offers the packet to all selected outputs at once;
- remembers which outputs have already taken it;
- acknowledges its input when the last selected output has taken it.

A packet whose mask is 0 is consumed without being delivered.

## R3 and the mesh

Each chip has mesh ports north, south, east and west (index 0 to 3 on
`mesh_in_*` and `mesh_out_*`). The east output of a chip connects to the west
input of its east neighbour.

R3 has five inputs (R2 and the four sides). Each input has:

1. a buffer;
2. a route decision with the offset decrement;
3. a 5-way controlled split.

Each output has a round-robin merge over the inputs that can reach it.

| Packet from | Condition | Goes to |
|---|---|---|
| R2 | `dx ≠ 0` | west or east by `sx`, with `dx − 1` |
| R2 | `dx = 0` | south or north by `sy`, with `dy − 1` |
| east or west input | `dx ≠ 0` | straight on, with `dx − 1` |
| east or west input | `dx = 0`, `dy ≠ 0` | south or north, with `dy − 1` |
| east or west input | `dx = dy = 0` | R2 |
| north or south input | `dy ≠ 0` | straight on, with `dy − 1` |
| north or south input | `dy = 0` | R2 |

A packet never turns back toward the side it came from, and an assertion
checks this.

**Direction convention.** The original description contradicts itself. Its
text sends a packet west when the x sign is positive. Its block diagram labels
the split "dx>0?" with output 0 to west and 1 to east. This RTL follows the
diagram's numbering: `sx` = 0 west, 1 east; `sy` = 0 south, 1 north.

## The CAM search and its four-phase cycle

In silicon the search works like this:

1. An event buffer (EB) puts the tag on the search lines.
2. A validity check raises **PreB**.
3. All 64 × 256 words compare at once.
4. A dummy word that always misses tells when the comparison is over. It
   raises **Check**.
5. For as long as both are high, every word whose match line is still charged
   gives `Match = Check & PreB & WENB & ML`.
6. Check acknowledges the EB, the search lines return to neutral, PreB falls
   and then Check falls.

**This RTL keeps the handshake but changes the search.**

- **Storage.** The 12-bit words are stored in one small memory per neuron:
  64 × 12 bits, 256 memories per core. It is not 786k registers.
- **Scan.** The search visits one word index per cycle, with all 256 neurons
  compared in parallel. In the cycle that visits word `w`, neuron `n` pulses if
  its word `w` equals the tag; `match_type[n]` gives that word's synapse type.
- **Check.** It rises after the last word, in the dummy word's place.
- **Timing.** One broadcast takes **WORDS + 3 = 67 cycles** from acceptance
  back to idle: one cycle to raise PreB, 64 search cycles, one with Check
  high, and one to drop Check. Back-to-back broadcasts come every 68
  cycles, one more for the handshake with the next event.
- **Pulses per cycle.** A neuron gets at most one pulse per cycle. The decoder
  steers it to one of four outputs (`syn_pulse[core][neuron][type]`).
- **WENB.** A programming write in a search cycle blocks that cycle's pulses,
  as WENB does in silicon.

The reason for this departure is synthesis: a fully parallel CAM written as
flip-flops is far too large for logic synthesis. The price is speed. The chip
broadcasts in about 27 ns, about 38 Mevents/s per core. Here a broadcast costs
67 clock cycles, so reaching that rate would need a 2.5 GHz clock.

## Reset and the clearing sweeps

The CAM and source memories have no reset, like the SRAM they model. After
reset each clears itself, one address per cycle:

- the CAMs in 64 cycles, writing tag 0 and type 0;
- the source memories in 1024 cycles, writing empty entries.

While a core's memories are clearing, its programming channel is not ready.
The host word then waits in the input buffer. Unprogrammed CAM words listen to
tag 0, so tag 0 is best left unused.

## Host input and programming

The 34-bit host word is latched in an input buffer. A controlled pass drops
words whose chip id is not this chip's. A chain of controlled splits then
sorts what is left:

| Bits | Meaning |
|---|---|
| `[33:31]` | chip id |
| `[30]` = 0 | memory programming: `[29:28]` core, `[27:0]` programming word |
| `[30]` = 1, `[29]` = 1 | bias word `[22:0]`; `[28]` = 1 BiasGen1, 0 BiasGen2 |
| `[30]` = 1, `[29]` = 0, `[28]` = 1 | event packet `[19:0]`, injected into R2 |
| `[30]` = 1, `[29]` = 0, `[28]` = 0 | configuration word `[11:0]` for core `[27:26]` |

A core's 28-bit programming word has two forms:

- **CAM write, `[27]` = 0:** `[26:19]` neuron, `[18:13]` word, `[12:3]` tag,
  `[2:1]` synapse type.
- **SRAM write, `[27]` = 1:** `[26:19]` neuron, `[18:17]` slot, `[16]` upper
  half, `[9:0]` data.

A 28-bit word cannot hold a 10-bit address and a 20-bit entry at once, so a
source word takes two writes:
- the lower half `[9:0]` = tag;
- the upper half `[19:10]` = `{sy, sx, dy, dx, core_mask}`.

The widths 34, 28, 12, 23 and 20 are the original design's. The bit
positions of the selector fields are this implementation's choice.

## Handshakes: from QDI to valid/ready

The original routers are quasi-delay-insensitive asynchronous circuits:
four-phase, dual-rail channels built from a few primitives. Here every channel
is a single-clock `valid`/`ready` pair. A transfer happens on a rising edge
when both are high. Reset is synchronous and active low.

| Primitive | Module | Behaviour |
|---|---|---|
| buffer | `qdi_buffer` | one place; `in_ready` = empty, so it never depends on `out_ready` and cuts every combinational path; one token per two cycles |
| merge | `qdi_merge` | N inputs, round-robin; holds its grant while the output stalls |
| split | `qdi_split` | copy to two outputs; input acknowledged when both have taken it |
| controlled split | `qdi_ctrl_split` | N outputs, one selected by a control value that travels with the data |
| controlled pass | `qdi_ctrl_pass` | pass when the control is true, else consume and drop |
| mask split | `qdi_mask_split` | copy to every output selected by a mask |

Assertions inside the primitives check the handshake rules, for example:

- a buffer holds its output while it is stalled;
- a merge acknowledges at most one input per cycle;
- a controlled pass never forwards a token it was told to drop.

## What is outside the RTL

The chip's analog circuits are not modelled. Their digital connections are
ports of `dynaps_chip`:

- **`nrn_req` / `nrn_ack`:** the spike handshake of each of the 4 × 256
  neurons. A neuron model drives `nrn_req`.
- **`syn_pulse[core][neuron][type]`:** the pulses for the pulse
  extenders and the four DPI synapse filters of each neuron.
- **`bias_*`:** the 23-bit words for the two bias generators.
- **`conf_*`:** the 12-bit words for each core's configuration latches.
  The content of these latches is not specified.
- **`cam_preb`, `cam_check`:** each core's search state, for observation.

The I/O pads and the board are not modelled either. That includes the FPGA
that programs the chips and the wiring of nine chips on a board.

## Where this RTL departs from the original chip

- Clocked valid/ready channels replace the asynchronous four-phase circuits.
  Latencies are counted in cycles, not nanoseconds.
- The CAM search visits one word index per cycle instead of all words at
  once. The broadcast rate is therefore clock/67 per core.
- In R1 the decrement is buffered, and only one event at a time is in the
  memory loop.
- R1 has a third output that drops empty source words.
- The core field of the packet is a mask, so a word can address several
  cores.
- The packet bit order, the host word layout and the programming word layouts
  are this implementation's choices.
- The memories clear themselves after reset. During the sweep they hold off
  programming.
- The host word passes through an input buffer before it is decoded.
- The address encoder arbitrates rows, then columns, round-robin.

## Capacity against the demonstrated workloads

**Poker-card CNN.** This is the convolutional network used to classify
poker-card suits from a dynamic vision sensor. Its layers are:

| Layer | Size | Neurons |
|---|---|---|
| Input | 32 × 32 | 1024 |
| Convolution | 4 maps × 16 × 16 (8 × 8 kernels, stride 2) | 1024 |
| Pooling | 4 × 8 × 8 (2 × 2) | 256 |
| Output | 4 populations × 64 | 256 |

The total is 2560 neurons, which needs three chips. Against one chip:

- A convolution neuron has 64 inputs, one per CAM word.
- With one map per core, an input pixel feeds four cores: four source words,
  or one word with mask `1111`.
- Each output neuron listens to 64 pooling neurons.

**Power measurement.** In the configuration used to measure power, each
neuron reaches 25% of the chip: 64 neurons in each of the 4 cores. This fits
the four source words. It also needs about 256 inputs per neuron, which fits
64 CAM words only if sources share tags.

**Broadcast rate.** The rate quoted for the silicon, 38 Mevents/s per core,
is not reached at a realistic clock (see the CAM section). At 200 MHz a core
broadcasts about 2.9 Mevents/s.

## Verification

Every block has a self-checking testbench in `tb/`. Each one:

- compares against a reference model written in the testbench;
- stops with a watchdog;
- ends by printing `TB_RESULT checks=<n> failures=<n>`.

| Testbench | Covers |
|---|---|
| `tb_qdi_*` | each primitive under random stalls: order, no loss, no duplication, throughput |
| `tb_r1_sram` | clearing sweep of exactly 1024 cycles; random writes in halves; all reads; one-cycle read latency |
| `tb_r1_router` | routing words of every kind; events from R2; words delivered in order to the core and to R2; read rate |
| `tb_r2_router`, `tb_r3_router` | routing decisions, mask delivery, hop decrement, no U-turns, under stalls |
| `tb_input_interface` | 400 random host words with foreign chip ids and output stalls |
| `tb_cam_array` | clearing sweep; pulses per visited word with their types; order of PreB and Check; WORDS + 3 cycle count; WENB blocking |
| `tb_aer_encoder` | random spikes from 16 neurons; one event per spike, naming an acknowledged neuron; burst of all neurons |
| `tb_dynaps_core` | CAM programming through the 28-bit word; pulse counts per neuron and type against a reference; events from spikes |
| `tb_dynaps_chip` | two chips side by side, at 4 × 4 neurons and 8 words (see below) |
| `tb_dynaps_chip_full` | one chip at full size with default parameters; its mesh outputs loop back to its own inputs |
| `tb_workload_cnn` | the convolution layer of the poker-card network on one full-size chip (see below) |

**Two-chip test (`tb_dynaps_chip`).**
- Setup: the east–west link between the chips stalls at random. Every CAM and
  source word is programmed through the host input.
- Traffic: the test sends bias, configuration and foreign words, injects host
  events into R2, and makes 80 random spikes.
- Checks: the exact number of broadcasts of every tag to every core, and the
  pulse count of every neuron and synapse type.
- Mechanism counts, each of which must be non-zero:
  - R1: local deliveries, words sent to R2, empty-word drops;
  - R2: deliveries to cores;
  - R3: hops, hand-overs from R3 to R2, packets leaving the board;
  - merge contention in R1 and R2, link stalls;
  - host side: bias and configuration words, foreign-id drops.

**Full-size test (`tb_dynaps_chip_full`).** A single neuron's four words
exercise every path:
- the own core;
- two other cores;
- one hop east and back;
- one hop north and back.

Every one of the 4 × 256 × 4 synapse outputs is checked.

**Convolution workload (`tb_workload_cnn`).** One full-size chip holds the
four 16 × 16 feature maps, one map per core.
- Setup: 57,600 CAM words are programmed through the host input. They are the
  receptive fields of 8 × 8 kernels with stride 2 over a 32 × 32 input. The
  kernel sign at each position picks the synapse type.
- Phase 1: 300 input events are injected as host events with mask `1111`.
  Every neuron's pulse count per type is compared with a direct convolution of
  the event list. The broadcast rate is checked at 68 cycles per event.
- Phase 2: each convolution neuron's source word points to its 2 × 2 pooling
  neuron one chip east. Sixty random spikes must each leave through the east
  port with the right tag and core.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/dynaps_pkg.sv tb/tb_dynaps_chip.sv --top-module tb_dynaps_chip -Mdir obj
./obj/Vtb_dynaps_chip
```

The full-size chip builds in under a minute and simulates in seconds.

## Files

`rtl/`:
- `dynaps_pkg.sv`: packet type, widths and layouts.
- The six primitives: `qdi_buffer`, `qdi_merge`, `qdi_split`,
  `qdi_ctrl_split`, `qdi_ctrl_pass`, `qdi_mask_split`.
- The routers: `r1_sram`, `r1_router`, `r2_router`, `r3_router`.
- The host decoder: `input_interface`.
- The core: `cam_array`, `syn_decoder`, `aer_encoder`, `dynaps_core`.
- The top level: `dynaps_chip`.

Each file opens with a description of its behaviour, interface and timing.
