# A switch that runs tiny packet programs

End-hosts often need to see what the network is doing. Examples are queue build-up
at one hop, the utilization of each link on a path, or which flow-table entry forwarded a
packet. They may also need to change small pieces of per-link state, and they need to do it
within one round-trip time. A *tiny packet program* (TPP) does this in-band. The end-host puts
a program of at most five instructions and a pre-sized scratch area into a packet. Every switch
on the path runs the program as the packet goes through its pipeline. The instructions read
switch statistics into the scratch area or write values from it into switch registers. The
packet carries the results onward to the receiver, which can echo them back.

This repository is synthesizable SystemVerilog for such a switch. It has four ports. Each port
has a pipeline of four stages, and each stage holds a slice of the TPP processor. The four
pipelines share per-link statistics registers and feed a set of output queues.

## The packet program

A TPP sits either directly after the Ethernet header, under ethertype `0x6666`, or inside a
UDP datagram to port `0x6666`. Its layout, with offsets in bytes from the start of the TPP:

| offset | size | field |
|---|---|---|
| 0 | 1 | TPP length in bytes (everything below, including the trailing protocol field) |
| 1 | 1 | packet-memory length in bytes |
| 2 | 1 | addressing mode: 0 = stack, 1 = hop |
| 3 | 1 | stack pointer in bytes (stack mode) or hop number (hop mode) |
| 4 | 1 | per-hop memory length in 32-bit words (hop mode) |
| 5 | 1 | reserved |
| 6 | 2 | checksum (carried, not checked) |
| 8 | 4 | application ID |
| 12 | 4·n | n ≤ 5 instructions |
| 12+4n | pmem | packet memory, big-endian 32-bit words |
| end−2 | 2 | encapsulated protocol |

The number of instructions is not stored. It is computed as
(TPP length − 14 − packet-memory length) / 4. The switch sees only the first 10 words of packet
memory. This is 320 bits, next to the 160 bits of instructions. An instruction that names a
word beyond the tenth is not executed. The same applies to any instruction whose operands or
switch address do not exist. A TPP that is malformed, or that does not fit in the first 128
bytes of the frame, is forwarded as an ordinary frame.

The instruction word is `op[31:28] addr[27:12] a[11:6] b[5:0]`. `addr` is a switch address.
`a` and `b` are word indices into packet memory.

| op | mnemonic | effect |
|---|---|---|
| 0 | NOP | — |
| 1 | LOAD addr, a | pm[a] ← sw[addr] |
| 2 | STORE addr, a | sw[addr] ← pm[a] |
| 3 | PUSH addr | pm[sp] ← sw[addr]; sp += 1 |
| 4 | POP addr | sp −= 1; sw[addr] ← pm[sp] |
| 5 | CSTORE addr, a, b | if sw[addr] = pm[a]: sw[addr] ← pm[b], pm[a] ← pm[b]; else pm[a] ← sw[addr], **halt** |
| 6 | CEXEC addr, a, b | if (sw[addr] & pm[a]) ≠ pm[b]: **halt** |

*Halt* means that no later instruction of the TPP runs at this switch, whichever stage it
belongs to. A failed CSTORE leaves the current value in `pm[a]`, so the sender learns what
beat it. Typical uses:

- CSTORE guards a version number. This is how several senders update a shared rate register
  without a lock.
- CEXEC restricts a program to one switch by testing its ID.

### Stack and hop addressing

- **Stack mode:**
  - PUSH and POP use the stack pointer held in the header.
  - The stack pointer counts bytes, so it moves by 4 per word.
  - LOAD, STORE and the conditionals use absolute word numbers.
- **Hop mode:**
  - Each switch works in its own slice of packet memory, starting at word
    `hop × per-hop-length`.
  - Every operand is an offset into that slice, and PUSH starts at offset 0 of the slice.
  - The hop number goes up by one at each switch.

Either way the header field is rewritten on the way out, so the next switch continues where
this one stopped.

### Why PUSH and POP are rewritten first

The processor is spread over four stages. Each stage can reach only its own memories, and the
instructions are executed by whichever stage owns their address, not in program order. A
PUSH whose target lives in stage 3, followed by a PUSH whose target lives in stage 1, would
fill the stack in the wrong order if the stack pointer moved at execution time. Before the
first stage, `tpp_xlate` therefore walks the program once in order and replaces:

- each PUSH with a LOAD into the word the stack pointer points at;
- each POP with a STORE from that word.

After that, every instruction has a fixed packet-memory operand, and the stages may run them
in any order. Ordering between a read and a write of the *same* switch location is up to the
sender: a TPP should not hold a read-after-write or write-after-write pair inside one stage.
Conditionals do respect pipeline order, through the halt index described below.

## Switch memory map

Every readable value has a 16-bit address.

| address | contents | served by | writable |
|---|---|---|---|
| `A000` | switch ID | first stage | no |
| `A001` | switch version | first stage | no |
| `B000` | bytes in the packet's output queue | last stage | no |
| `B001` | input port | first stage | no |
| `B002` | output port | last stage | **yes**: a TPP may redirect itself |
| `B003` | matched forwarding entry | first stage | no |
| `B004` | frames in the packet's output queue | last stage | no |
| `C000`–`C00B` | output link: ID, queue bytes, RX utilization, RX bytes, TX utilization, TX bytes, App0, App1, RX frames, TX frames, dropped bytes, dropped frames | last stage, through `link_regs` | App0 and App1 only |
| `(s+1)·0x1000 + 0..7` | registers of stage s (0-based) | stage s | yes |
| `(s+1)·0x1000 + 8` | free-running cycle counter of stage s | stage s | no |
| `(s+1)·0x1000 + 0x800..0xFFF` | 2048 SRAM words of stage s (64 kbit) | stage s | yes |

Utilization is the number of bytes received or sent in the last completed measurement period.
The period is `UTIL_PERIOD` cycles: 160 000 cycles, or 1 ms at 160 MHz. The link statistics
always refer to the packet's **output** link, so a TPP sees the queue it is about to join.

Writes are not executed in three cases:

- the address is read-only;
- the configuration input `cfg_wr_en` is low, which is how an operator turns off every TPP
  write in the switch;
- an earlier conditional has failed.

## The stage (`tpp_stage`)

Each stage has:

- five execution units (`tcpu_exec_unit`), one per instruction slot;
- a register file of eight registers (`stage_regfile`);
- a single-port SRAM, 128 bits wide and 512 lines deep (`stage_sram`).

The per-packet header vector (`phv_t`) carries the parsed TPP, the translated instructions, the
10 packet-memory words, the forwarding metadata and the **halt index** between stages. The
halt index is the slot of the first conditional that has failed so far. Instruction k runs in
a stage only if all of the following hold:

- its address decodes to this stage;
- its operands are inside packet memory;
- k is below the halt index;
- no earlier slot failed in this stage.

A stage holds one packet at a time and moves through these states:

```
IDLE/OUT --accept--> RD (one cycle per SRAM read, +1 for the data) --> EX --> WR (one cycle per SRAM write) --> OUT
                  \__ no SRAM read ____________________________________/   \__ no SRAM write __/
```

- A TPP that touches only registers and metadata leaves **2 cycles** after it entered. This
  matches the per-stage latency measured on the original prototype. An ordinary frame takes
  the same path.
- Each SRAM read adds one cycle, plus one cycle for the last read to return. The reads come
  from LOAD, from CSTORE and CEXEC comparisons, and from PUSH once it has been translated to
  LOAD.
- Each SRAM write adds one cycle. This includes the write of a successful CSTORE.
- In EX, all five units evaluate together on the values read, and register, metadata and link
  writes commit.

### Atomic updates across ports

The App0/App1 link registers are shared by all four port pipelines. When a TPP writes one of
them, the last stage raises a request in EX and waits for a grant. `link_regs` grants one
pipeline per cycle, round robin. The granted stage reads, compares and writes in that single
cycle, so a CSTORE on a link register is atomic against every other port. Reads need no grant.

## Blocks

| block | file | role |
|---|---|---|
| shared types | `rtl/tpp_pkg.sv` | formats, opcodes, header vector, memory map |
| parser | `rtl/tpp_parser.sv` | finds the TPP (two parse paths), extracts fields |
| translation | `rtl/tpp_xlate.sv` | PUSH/POP → LOAD/STORE, stack or hop addressing |
| execution unit | `rtl/tcpu_exec_unit.sv` | one instruction's data operation and condition |
| stage SRAM | `rtl/stage_sram.sv` | 512 × 128 bit, single port, 32-bit lane writes, 1-cycle read |
| stage registers | `rtl/stage_regfile.sv` | 8 × 32 bit, 5 write ports, cycle counter |
| stage | `rtl/tpp_stage.sv` | address decode, SRAM sequencing, five units, handshake |
| rewrite | `rtl/tpp_rewrite.sv` | puts packet memory and the new hop/SP back into the frame |
| port pipeline | `rtl/tpp_pipeline.sv` | parser → register → 4 stages → rewrite |
| link registers | `rtl/link_regs.sv` | per-link counters, utilization, App0/App1, write arbiter |
| output queues | `rtl/switch_queues.sv` | one 16-frame FIFO per port, tail drop, occupancy |
| top | `rtl/tpp_switch.sv` | 4 pipelines + link registers + queues |

The pipeline's register-only latency is `1 + 2·NSTAGES` cycles, which is 9 at the defaults.
Each port accepts a new frame every 2 cycles.

### Top-level interface (`tpp_switch`)

Frames move as a **header window** (`pkt_t`): the first 128 bytes plus the frame length.
Payload beyond the window is not modelled. The forwarding lookup is outside the design. For
every frame it supplies a `meta_t` with the output port and the matched entry ID. The input
port is filled in by the switch. Other ports:

- `cfg_switch_id`, `cfg_version` and `cfg_wr_en` come from the control plane.
- The per-port handshakes are valid/ready.
- A frame sent to a port number that does not exist is discarded.

| parameter | default | meaning |
|---|---|---|
| `NPORTS` | 4 | ports, pipelines, queues, links |
| `NSTAGES` | 4 | TCPU stages per port |
| `SRAM_DEPTH` | 512 | 128-bit lines per stage SRAM (64 kbit) |
| `QDEPTH` | 16 | frames per output queue |
| `UTIL_PERIOD` | 160000 | utilization measurement period in cycles |

## Where this design departs from, or goes beyond, its source

The following are this design's own choices, not taken from the original description:

- the exact field widths of the TPP header;
- the instruction encoding and opcode numbers;
- the memory map, apart from `0xB000` for queue size;
- the order of the CEXEC operands (mask in `a`, value in `b`);
- the header window;
- queue depth and tail drop;
- the link-register arbiter;
- utilization counted in bytes per period.

Other departures and gaps:

- **Ingress only.** The original block diagram also shows an egress pipeline. Here all
  sixteen stages (four ports × four) sit at ingress. The last stage serves the
  egress-flavoured values, such as queue occupancy and output-link counters.
- **Hop length unit.** The source's hop-addressing example mixes bytes and words. Here the
  per-hop length is in words.
- **UDP port.** The source names 0x6666 once as a source port and once as a destination
  port. The parser matches the destination port.
- **Checksum.** The TPP checksum is not computed or checked.
- **Outside the design.** Forwarding tables, MAC/PHY, the end-host software and the control
  CPU are not part of the RTL.
- **Statistics.** Only the statistics in the memory map above are available. The following
  are missing:
  - per-flow-entry counters, since the tables are outside the design;
  - scheduler configuration;
  - multicast output bitmaps.

  Each output port has a single queue, so the queue ID equals the output port.
- **Word size.** Every packet-memory value is a 32-bit word, and the stack pointer moves by 4
  bytes per PUSH. The source describes some statistics as 16-bit values. Packing them two per
  word is not supported.
- **Packet memory limit.** Only 10 words of packet memory are visible per switch. A
  three-word-per-hop record therefore covers three hops. Examples are a packet-history record
  (switch, matched entry, input port) and a queue snapshot (switch, port, occupancy). Words
  beyond the tenth are left as the sender wrote them.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. Shared stimulus helpers (building TPP frames, reading
results back) are in `tb/tb_tpp_util.sv`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/tpp_pkg.sv tb/tb_tpp_util.sv tb/tb_tpp_switch.sv --top-module tb_tpp_switch
./obj_dir/Vtb_tpp_switch
```

Replace `tb_tpp_switch` with any other `tb_<block>`.

`tb_tpp_switch` runs the whole switch at its default parameters, and takes about half a
minute. It counts each mechanism and fails if any count stays at zero:

- ordinary frames passing through unchanged;
- both parse paths;
- a two-hop run;
- a TPP rewriting its own output port;
- writes disabled by `cfg_wr_en`;
- SRAM stall cycles;
- link-register grant waits from four simultaneous CSTOREs;
- CSTORE success and failure, in an RCP-style version/rate update;
- a CEXEC that stops a program;
- tail drops at a full queue;
- contention for a queue;
- a published utilization period.

The unit testbenches compare against independent reference models with random stimulus. The
stage testbench checks the cycle counts given above.

`tb_tpp_workloads` runs the example programs of typical TPP applications on the full switch.
It plays each hop by feeding the frame back in with a new switch ID. The programs are:

- queue snapshots for micro-burst detection;
- RCP-style rate collection and versioned update;
- packet history;
- link-utilization probes for load balancing;
- routing context for sketches;
- a program that reads every stage's cycle counter, which confirms 2 cycles per stage.
