# An isolating match-action pipeline (Menshen-style RMT with overlays)

A reconfigurable match-action (RMT) pipeline normally runs one P4 program.
This design lets several independent programs share one pipeline at line rate.
Each program is called a *module* and can belong to a different tenant. The
pipeline keeps the modules apart in three ways:

* **Behaviour.** A packet of module *m* is only ever parsed, matched, modified
  and deparsed by module *m*'s configuration.
* **Resources.** Every table entry and every stateful memory word belongs to
  exactly one module.
* **Reconfiguration.** One module can be rewritten while the others keep
  running and keep their state.

The idea behind it is what the paper *Isolation Mechanisms for High-Speed
Packet-Processing Pipelines* (Menshen) calls overlays and space partitioning:

* **Overlays.** Every shared unit whose configuration is small holds one
  configuration word per module. The unit reads that word using the packet's
  module ID. This covers the parser, key extractor, key mask, segment table and
  deparser. In effect each packet brings its own program to the unit.
* **Space partitioning.** Units too large to copy per module are split between
  modules instead:
  * the exact-match table stores the module ID inside every entry;
  * the stateful memory is cut into per-module segments, and every address is
    checked and translated through the segment.

The module ID is the 12-bit VLAN ID of the packet.

The SystemVerilog in `rtl/` implements the whole packet path: the ingress
filter, parsers, five match-action stages, deparsers with packet buffers, and
the output merge. It also implements the in-band reconfiguration path: the
reconfiguration packets, the daisy chain of configuration registers, and the
AXI-Lite counter and bitmap registers. Sizes are those of the 512-bit
(250 MHz-class NIC) configuration.

## 1. Data path at a glance

```
 s_axis (512b) ─► packet_filter ─┬─► packet_buffer[0..3] ─► deparser[0..3] ─► output_arbiter ─► m_axis
                  │   │          │                              ▲
                  │   │          └─► parser[0..1] ─► stage1 ─► … ─► stage5 ─┘ (PHV routed by buffer tag)
                  │   └─ AXI-Lite: reconf counter (0x0), module bitmap (0x4)
                  └─ reconfiguration command ─► parser node ─► stage1 … stage5 ─► deparser node ─► counter++
```

Each packet goes through the pipeline as follows.

1. **Packet filter.** The filter decodes the first 64-byte beat (Ethernet,
   802.1Q, IPv4, UDP) and puts the packet in one class:
   * **Reconfiguration**: UDP destination port `0xF1F2`. The packet is
     consumed and turned into one configuration command.
   * **Drop**: the packet has no VLAN tag, its VLAN ID is 32 or more (no table
     row), or its module's bit is set in the bitmap register.
   * **Data**: anything else.

   A data packet is written whole into one of four packet buffers. Buffers are
   chosen round robin, and the choice is recorded as a one-hot *buffer tag*.
   The packet's first two beats (128 bytes) also go to one of two parsers, also
   chosen round robin.
2. **Parser.** The parser builds the packet header vector (PHV) from those 128
   bytes, using the module's parse program.
3. **Stages.** The PHV passes through five stages. Each stage builds a key,
   looks it up, and runs a VLIW action on the PHV.
4. **Deparser.** After stage 5 the PHV goes to the deparser whose buffer the
   tag names. That deparser writes the modified fields back into the oldest
   packet of its buffer. The PHV's destination port becomes `m_axis_tdest`.
   If the PHV's discard flag is set, the packet is read out of the buffer and
   not sent.
5. **Output merge.** A round-robin arbiter merges the four deparser outputs,
   one whole packet at a time.

### 1.1 Why PHVs and packets stay paired

Each buffer has its own deparser, and the deparser keeps a FIFO of PHVs
carrying its tag. Packets enter a buffer in arrival order, and their PHVs
leave the stages in the same order. So the head PHV of a deparser always
belongs to the head packet of its buffer. No packet identifier is needed.

The PHV FIFO is as deep as the packet buffer (64 entries against 64 beats).
Each packet takes at least one beat, so the FIFO cannot overflow. An assertion
in the top checks this.

The two parsers feed one stage chain. A parser emits a PHV a fixed two cycles
after the beat that completes its header. At most one header completes per
input beat, so the two parser outputs never collide. A second assertion checks
this too.

### 1.2 The module ID runs one cycle ahead

Between elements the module ID travels on its own wire (`vid_early`), one
cycle before the PHV. Each element starts its configuration-RAM read with
`vid_early`, so the module's word is ready when the PHV arrives. This hides the
RAM read latency, which would otherwise add a cycle at every table.

## 2. PHV and metadata

The PHV is 128 bytes and has 25 containers:

| Containers | Number | Width | Bits of `phv_t` |
|---|---|---|---|
| 0–7 | 8 | 2 bytes | `c2` |
| 8–15 | 8 | 4 bytes | `c4` |
| 16–23 | 8 | 6 bytes | `c6` |
| 24 | 1 | 32-byte metadata | `md` |

The metadata record `meta_t` holds:

* the module ID (VLAN ID);
* the one-hot buffer tag;
* the header byte count;
* the destination port;
* the discard flag;
* reserved bits.

The parser zeroes the whole PHV for every packet. Nothing from an earlier
packet, or from another module, can leak through a container.

ALUs cannot write the module ID or the buffer tag. The metadata ALU can only
set the port and the discard flag.

## 3. Match-action stage

A stage is four one-cycle sub-steps, so it accepts a PHV every cycle and has a
latency of 4 cycles.

| Cycle | Sub-step | What happens |
|---|---|---|
| 1 | key extractor | The module's key-extractor entry selects two 6-byte, two 4-byte and two 2-byte containers. An optional predicate compares two operands with ==, !=, >, >=, < or <=. Each operand is a container or a 7-bit constant. The 24 key bytes and the 1-bit predicate make a 193-bit key, which is ANDed with the module's 193-bit mask. |
| 2 | CAM lookup | `{module ID, key}` (205 bits) is compared with 16 entries. The lowest matching entry wins. |
| 3 | action RAM | The hit address reads a 625-bit VLIW word. A miss gives the all-zero word, which means "no action". |
| 4 | action engine | 25 ALUs, one per container, and one stateful ALU compute the new PHV. |

Splitting the match into a CAM-lookup step and an action-RAM step is the
paper's deep-pipelining technique.

### 3.1 VLIW actions

The VLIW word is 25 actions of 25 bits. Action *k* sits in bits
`[25k+24:25k]` and writes only container *k*. Each ALU gets its two operands
from an input crossbar; there is no output crossbar.

| Opcode | Name | Format | Effect |
|---|---|---|---|
| 0 | nop | – | keep |
| 1 / 2 | add / sub | `op[24:21] a[20:16] b[15:11]` | container ← a ± b |
| 3 / 4 | addi / subi | `op a imm[15:0]` | container ← a ± imm |
| 5 | set | `op – imm[15:0]` | container ← imm |
| 6 | load | `op a(addr)` | container ← mem[seg(a)] |
| 7 | store | `op a(addr) b(data)` | mem[seg(a)] ← b |
| 8 | loadd | `op a(addr)` | mem[seg(a)] += 1; container ← new value |
| 9 | port | in slot 24, `imm[7:0]` | metadata destination port ← imm |
| 10 | discard | in slot 24 | metadata discard ← 1 |

Operands are zero-extended to 48 bits. Results are cut to the container's
width.

Each stage has one stateful port, so only one stateful action can run per
stage per packet. If several containers ask for it, the lowest-numbered
container wins.

### 3.2 Stateful memory segments

The stateful memory has 256 words of 32 bits per stage. Each module has a
16-bit segment entry: offset in the upper byte, range in the lower byte.

* A module-local address `a` is legal only if `a < range`. It then maps to the
  physical word `offset + a`.
* An illegal access reads 0 and writes nothing.

So no program can reach another module's words, whatever addresses it
computes.

## 4. Parser and deparser programs

Parser and deparser tables use the same entry: ten 16-bit actions (160 bits).
Action *k* occupies bits `[16k+15:16k]` and has these fields:

```
[15:13] reserved   [12:6] byte offset (0..127)   [5:4] type 1=2B, 2=4B, 3=6B   [3:1] container number   [0] valid
```

* The **parser** copies the bytes at the offset into the container,
  big-endian.
* The **deparser** builds a 128-byte overlay from the same actions: which
  bytes to replace, and with which container values. It then streams the packet
  out of its buffer, replacing only those bytes.

In both, a later action overrides an earlier one. The payload after the first
128 bytes is never touched.

## 5. Reconfiguration

### 5.1 The procedure

Software changes a module without stopping the others:

1. Set the module's bit in the bitmap register (AXI-Lite address `0x4`). From
   then on the filter drops the module's data packets.
2. Send one reconfiguration packet per table entry to be written.
3. Poll the counter register (address `0x0`) until it has grown by the number
   of packets sent.
4. Clear the bitmap bit.

Other modules' packets keep flowing during all four steps, and their state is
never touched.

### 5.2 Reconfiguration packet format

A reconfiguration packet is an ordinary VLAN/IPv4/UDP packet to port `0xF1F2`:

| Bytes | Content |
|---|---|
| 0–45 | Ethernet, VLAN, IPv4 and UDP headers |
| 46, upper nibble of 47 | 12-bit resource ID |
| lower nibble of 47 | reserved |
| 48 | entry index |
| 49–63 | padding |
| 64 onward | the entry, most significant bit first |

The filter captures the first three beats and, two cycles after the last beat,
issues a command `{resource ID, index, 625 data bits}`. The data bits are the
first 625 payload bits.

### 5.3 Daisy chain

The command walks a chain of registers, one hop per cycle:

* the parser node (element 0);
* stages 1–5 (elements 1–5);
* the deparser node (element 6).

A node writes the command into its own tables when bits `[11:4]` of the
resource ID equal its element number. Bits `[3:0]` pick the table:

| Element | Table code | Table | Index |
|---|---|---|---|
| 0 (parsers) | 0 | parser table, written into both parsers | module |
| 6 (deparsers) | 0 | deparser table, written into all four | module |
| 1–5 (stages) | 0 | key extractor (38 b) | module |
| 1–5 | 1 | key mask (193 b) | module |
| 1–5 | 2 | CAM entry `{vid[11:0], key[192:0]}` (205 b) | CAM address |
| 1–5 | 3 | VLIW word (625 b) | CAM address |
| 1–5 | 4 | segment `{offset, range}` (16 b) | module |

Each table takes the top *W* bits of the command data, where *W* is its entry
width.

When a command leaves the end of the chain, it increments the counter
register. The counter therefore tells software that every earlier command has
been applied.

The data path only reads the tables. A table word that has not been written
since reset reads as zero, which every unit treats as "no action".

The key-extractor entry is 38 bits:

| Bits | Field |
|---|---|
| `[37:35]`, `[34:32]` | 6-byte container numbers |
| `[31:29]`, `[28:26]` | 4-byte container numbers |
| `[25:23]`, `[22:20]` | 2-byte container numbers |
| `[19:16]` | comparison: 0 none, 1 ==, 2 !=, 3 >, 4 >=, 5 <, 6 <= |
| `[15:8]` | operand A: bit 7 set means container `[4:0]`, otherwise a 7-bit constant |
| `[7:0]` | operand B, same encoding |

The key is laid out as `{c6a, c6b, c4a, c4b, c2a, c2b, flag}`.

## 6. Timing and sizes

### 6.1 Timing

| Path | Cycles |
|---|---|
| Parser, beat completing the header → PHV | 2 |
| Each stage | 4 (20 for five) |
| Deparser, PHV at queue head → first output beat | about 3 |

With an idle pipeline, the end-to-end test measures from the first input beat
to the last output beat:

* 26 cycles for a 64-byte packet;
* 50 cycles for a 1500-byte packet.

These numbers are smaller than the 106/129 cycles reported for the NIC
prototype, which also counts its shell. The stages take one PHV per clock
cycle. The input side takes one beat per clock cycle unless the selected
buffer is full.

### 6.2 Sizes

Sizes are localparams in `menshen_pkg`:

| Quantity | Value | From |
|---|---|---|
| Bus width | 512 bit | paper (NIC configuration) |
| Stages | 5 | paper |
| Modules (overlay table depth) | 32 | paper |
| Module ID | 12 bit (VLAN ID) | paper |
| CAM / VLIW depth per stage | 16 | paper |
| Key, CAM entry, mask | 193, 205, 193 bit | paper |
| Key extractor entry | 38 bit | paper (field layout: this design) |
| Parser / deparser entry | 10 × 16 bit | paper |
| ALU action, VLIW word | 25, 625 bit | paper (opcode numbers: this design) |
| Segment entry | 16 bit | paper |
| Parsers / packet buffers+deparsers | 2 / 4 | paper |
| Stateful memory per stage | 256 × 32 bit | this design |
| Packet buffer / PHV queue depth | 64 beats / 64 PHVs | this design |

Synthesized generically with yosys at these sizes, the top has:

* about 14,800 cells;
* about 60,000 flip-flop bits;
* about 571,000 memory bits, mostly the packet buffers and PHV queues.

## 7. Where this design departs from the paper

* **The CAM** is built from registers and comparators (16 entries per stage).
  The paper uses a vendor CAM block.
* **Stage throughput.** The paper's sub-elements process a PHV every 2 cycles;
  here every sub-step takes one PHV per cycle.
* **Encodings are this design's own.** The paper gives the entry widths but not
  the following, which are chosen here:
  * opcode numbers, comparison codes and container numbering;
  * the metadata layout;
  * the resource-ID split (element and table);
  * the field order inside the key-extractor entry;
  * the out-of-range rule for segments.
* **Dropping VLAN IDs of 32 and above** is an addition. Such packets have no
  row in the 32-deep tables.
* **Not built:**
  * the host shell (PCIe, DMA, Ethernet MACs);
  * the software side: compiler, resource and static checkers, and the library
    that forms reconfiguration packets;
  * the traffic manager;
  * the system-level module. In the paper this is a P4 program loaded as
    configuration; here it would simply be one more module.

  The pipeline exposes AXI-Stream and AXI-Lite ports where the shell would
  connect.
* **Only the 512-bit configuration exists.** The 256-bit NetFPGA variant is not
  built.
* **Multicast** is not possible: the pipeline sends each packet to one port and
  has no packet replication.
* **Source routing** fits only with fixed header offsets, since parser offsets
  are fixed per module.
* **Exact match only.** There is no hashing or ternary matching; workloads that
  need them use one CAM entry per flow, at most 16 per stage.
* **Two residual lint warnings.**
  * `rst_n` is flagged as both synchronous and asynchronous, because the
    assertions use it in `disable iff`.
  * The AXI-Lite response codes are constant `OKAY`.

## 8. Verification

Every module has a self-checking testbench in `tb/`. Each one:

* compares the module's outputs with a model written independently in the
  testbench;
* prints `TB_RESULT checks=N failures=M`;
* has a cycle watchdog.

| Testbench | What it checks |
|---|---|
| `tb_config_table` | table read latency, hold, writes, reset-to-zero |
| `tb_daisy_chain_node` | forwarding and element decoding |
| `tb_packet_buffer` | FIFO against a queue model, full/empty, random traffic |
| `tb_alu` | every opcode against a model |
| `tb_stateful_alu` | segment translation, range protection between two modules, load/store/loadd |
| `tb_exact_match_cam` | hits, misses, priority, isolation by module ID |
| `tb_key_extractor` | keys, predicates and masks of three modules |
| `tb_parser` | random parse programs and packets, byte for byte, early module ID |
| `tb_action_engine` | random VLIW words against a full model with its own memory |
| `tb_stage` | a stage programmed over its daisy-chain port; isolation of CAM entries; exact 4-cycle latency |
| `tb_deparser` | write-back, discard and tdest under backpressure |
| `tb_output_arbiter` | no interleaving, order, fairness |
| `tb_packet_filter` | classification, round robin, backpressure, command decoding, registers |
| `tb_menshen_top` | end to end, described below |
| `tb_workloads` | end to end: load balancing, QoS and a key-value cache, described below |

`tb_menshen_top` runs the full-size design with no parameter overrides. It
programs three modules only through reconfiguration packets:

* a calculator (CAM hit and miss);
* a firewall with port choice, plus a stateful packet counter;
* a second counter in its own segment.

A fourth module is left unconfigured. The test then:

* sends mixed traffic with gaps, backpressure and all three kinds of filter
  drop;
* rewrites the calculator while it is blocked;
* checks every output packet byte for byte;
* counts every mechanism, and fails if any never occurred.

`tb_workloads` also runs the full-size design. It loads three more use cases
side by side, again only through reconfiguration packets:

* load balancing: a 12-byte 4-tuple key; each known flow goes to its own
  output port, and unknown flows miss;
* QoS: the UDP destination port selects a class, and the class sets the IPv4
  version/TOS halfword;
* a simplified key-value cache: stage 1 maps a cached key to a slot, and
  stage 2 serves gets (load) and puts (store) from the module's segment.

Each output packet is compared with a model. The test fails if any use case
was never exercised, including gets that return an earlier put's value.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Wno-lint -Wno-style \
  -Irtl -y rtl rtl/menshen_pkg.sv tb/tb_menshen_top.sv --top-module tb_menshen_top -o sim
obj_dir/sim
```

Run another testbench by replacing `tb_menshen_top`. The end-to-end test
builds in under a minute and runs in seconds.

## 9. Files

* `rtl/menshen_pkg.sv`: sizes, PHV, metadata and command types, and encodings.
* `rtl/menshen_top.sv`: the whole pipeline.
* The building blocks:
  * `packet_filter`, `parser`, `stage`, `deparser`, `output_arbiter`;
  * `key_extractor`, `exact_match_cam`, `action_engine`, `alu`,
    `stateful_alu`;
  * `config_table`, `daisy_chain_node`, `packet_buffer`.
* `tb/`: one testbench per module, as listed above.

Every file opens with a comment on what the module does, its interface and
timing, and which parts follow the paper and which are this design's choice.
