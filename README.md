# SCIN: a network switch that performs All-Reduce itself

In tensor-parallel LLM inference, each transformer layer ends in an All-Reduce. Every
accelerator (GPU) holds a partial vector, and each one must end up with the element-wise sum
of all of them. In a shared-memory network, accelerators read and write each other's memory
through a switch. A GPU-driven All-Reduce therefore moves each vector through the switch
several times, and it synchronises the GPUs with extra round trips.

The switch-centric design in this repository moves the whole operation into the switch. An
**in-switch accelerator (ISA)** sits next to the switch core. It has a private connection to
every port. For one All-Reduce it does the following:

1. It waits until every participating GPU has written an *arrival flag* into the switch.
2. It reads the operands straight out of each GPU's memory with ordinary read requests.
3. It adds the operands in a fixed adder tree.
4. It writes the sum back into every GPU's memory. The same packet is multicast to all
   destinations.
5. Once every write has been acknowledged, it writes a *completion flag* that releases the GPUs.

The GPUs only write one flag and poll another. Each operand crosses each link once. Optionally,
the operands and results can travel as block-quantized INT8 with one BF16 scale per block.
This nearly halves the traffic.

This document describes the synthesizable SystemVerilog implementation (`rtl/`), its
testbenches (`tb/`), and where it departs from the published architecture.

## 1. Structure

```
                 link side (one flit stream each way per port)
   ┌─────────────────────────────────────────────────────────────────────┐
   │ scin_switch                                                         │
   │  switch_port[0..7]                                                  │
   │   rx: port_ingress ──INC=0──► Switch Rx queue ─► switch_core ─┐     │
   │                    ──INC=1──► ISA Rx req queue ─► barrier_mgr │     │
   │                    ──INC=1──► ISA Rx rsp queue ─► wave_table  │     │
   │   tx: pkt_rr_arb ◄─ Switch Tx queue ◄─────────────────────────┘     │
   │                 ◄─ ISA Tx req queue ◄─ reads / result writes / flags│
   │                 ◄─ ISA Tx rsp queue ◄─ answers to arrival-flag writes│
   │                                                                     │
   │  in_switch_accelerator                                              │
   │   instr_buffer ─► wave_controller ◄─► table_manager                 │
   │                        │  ▲ barrier_manager (arrival flags)         │
   │   wave_table[0..7] ─► (dequant_unit) ─► reduction_unit ─►           │
   │                        staging queue ─► quant_unit ─► multicast     │
   └─────────────────────────────────────────────────────────────────────┘
```

| Module | Role |
|---|---|
| `scin_pkg` | Flit, header and instruction types; shared constants |
| `scin_fp_pkg` | BF16 add, INT8×BF16 multiply, block scale and INT8 quantizer (integer-exact functions) |
| `sync_fifo` | Every transport-layer queue and the accelerator's staging queues |
| `pkt_rr_arb` | Packet-atomic round-robin merge of flit streams |
| `port_ingress` | Steers incoming packets by their INC flag and message class |
| `switch_port` | Two independent queue sets (Switch and ISA) plus the egress arbiter |
| `switch_core` | Non-blocking crossbar for regular traffic, round-robin per output |
| `instr_buffer` | Preloaded instruction descriptors, replayed in order |
| `barrier_manager` | One arrival flag per port; answers the flag writes |
| `table_manager` | Allocates wave-table entries (one index across all tables) |
| `wave_table` | Per-accelerator wave storage, filled by tag, IDLE/WAITING/READY |
| `dequant_unit` | INT8 × block scale → BF16 |
| `reduction_unit` | Pipelined BF16 adder tree; also gives the two half-tree sums |
| `quant_unit` | Block-wise INT8 requantization with ping-pong block buffers |
| `wave_controller` | Issue, readout and writer state machines |
| `in_switch_accelerator` | Wires the ISA blocks to the ports |
| `scin_switch` | Top level: 8 ports, switch core and the ISA |

## 2. Packets, the INC flag and the two queue sets

Everything on a link is a stream of 32-byte **flits** (`flit_t`: a `hdr` bit, a `last`
bit and 256 data bits), with valid/ready handshakes. A packet is one header flit followed by
its payload flits. The header (`hdr_t`, in the low bits of the header flit) contains:

- the message class (read request, write request, read response or write response);
- the **INC** bit;
- source and destination port;
- a 16-bit tag;
- a 48-bit address;
- the payload length in bytes.

Read requests and write responses are single-flit packets. A write request or read response
of 128 bytes is five flits.

Each port duplicates its transport-layer queues. Steering happens at ingress and depends on the
INC bit:

- **INC=0** packets are ordinary GPU-to-GPU traffic. They go through the Switch Rx queue, the
  switch core and the Switch Tx queue of the destination port.
- **INC=1** packets belong to the ISA:
  - requests (a GPU writing its arrival flag) go to the ISA Rx request queue;
  - responses (read data for the wave tables, write acknowledgements) go to the ISA Rx
    response queue.

On the way out, three queues compete for the link: Switch Tx, ISA Tx request and ISA Tx
response. A packet-atomic round-robin arbiter merges them. ISA traffic therefore never takes
up switch-core bandwidth, and the multicast of results never contends in the crossbar.

## 3. Instructions

An instruction (`instr_t`) has the following fields:

- a 16-bit ID;
- a 64-bit length in bytes per accelerator;
- eight 48-bit addresses (one per accelerator; results are written back in place);
- an 8-bit source mask and an 8-bit destination mask;
- a QuantEnable bit;
- a 16-bit BlockSize (elements per scale).

Both masks all-ones means All-Reduce. All sources and a single destination means Reduce. When
QuantEnable is set, the *next* slot of the buffer supplies the eight scale-factor addresses. The
controller consumes both slots.

Software loads the buffer once over a simple configuration bus (`cfg_we/cfg_addr/cfg_instr`,
`cfg_len`, `cfg_run`). The buffer then runs the program in order and wraps to slot 0 after
`cfg_len` slots. This matches a captured GPU graph that is replayed with the same tensor
addresses each time. The same bus sets each port's synchronisation (completion-flag) address.

## 4. Waves, entries and tags (the heart of the design)

The switch cannot buffer a whole message, so the transfer is cut into **waves** of
`WAVE_BYTES` (4 KB). Each wave-table entry holds exactly one wave from one accelerator. At the
defaults there are 24 entries per table, plus 128 B of scale storage per entry. The same entry
index is used in the tables of all participants, so one occupancy vector
(`table_manager`) describes all of them.

The wave controller runs three state machines concurrently.

**Issue.** The issue machine works through these steps:

1. It takes the head instruction.
2. It polls the barrier manager until every participant's arrival flag is set (each port
   counts as a participant if it is a source or a destination). It then clears those flags.
3. It walks through the transfer wave by wave. For each wave it needs a free entry. If none
   is free, it waits, and the rest of the transfer is *deferred* until the readout frees one.
   In steady state this keeps 24 waves in flight.
4. For each wave, it allocates the entry in the table of every participant. The allocation records:
   - the wave's start address;
   - the scale address;
   - the number of flits to expect (the last wave of a message may be partial).
5. It then sends one read request per 128-byte packet to every source, all sources in the
   same cycle. When quantizing, it adds one scale read per source.

**Tags.** A read request carries a tag that names where its response must land. The
response comes back with the same tag, so responses can return in any order and in any
interleaving:

| bits | meaning |
|---|---|
| 15 | 1 = scale field of the entry, 0 = data field |
| 14:8 | entry index (up to 128 entries) |
| 7:0 | packet index inside the entry |

An entry turns READY when all its expected flits have arrived.

**Readout.** Waves are read out in issue order. When the oldest wave is READY in every source
table, the readout machine does the following:

- It streams the wave out, one flit per cycle from all tables in parallel.
- Tables of non-sources feed zeros.
- The flits pass through the datapath into an output staging queue.
- It frees the entry after the last flit.

The readout counts credits for the staging queue (`DP_DEPTH` entries). It only reads a flit
when the result is sure to find room. This means back-pressure from a busy link never has to
stall the pipeline in the middle.

**Writer.** The writer packs the result stream into 128-byte write requests. These carry the
same addresses the operands were read from, and they go to every destination port in the same
cycle. A multicast beat moves only when all addressed ports can take it. When quantizing, each
wave's data packets are followed by one scale packet. The writer counts outstanding writes.
When the last acknowledgement is back, the issue machine writes the completion flag to each
participant's synchronisation address. The flag is a 32-byte flit whose first word is
`{1'b1, ID}`. After those writes are acknowledged, the next instruction starts.

### Constraints on an instruction

- The length must be a multiple of 32 bytes (a flit), and of BlockSize bytes when quantizing.
  A final partial packet or partial wave is allowed.
- BlockSize must be a power of two from 64 to 256 elements. The lower limit is two INT8
  flits. The upper limit (`WAVE_BYTES/16`) makes a wave's scales fill whole flits.
- Participants must be ports of this switch. Only one instruction is in flight at a time.

## 5. Arithmetic: dequantize, reduce, requantize

Values are **BF16**. Every operation rounds to nearest-even and flushes subnormals to zero.
All of it is integer logic in `scin_fp_pkg`, so a result depends only on its operands and on
the fixed adder-tree order. An All-Reduce is therefore bit-reproducible from run to run.

- **Unquantized**: a 32-byte flit carries 16 BF16 values. These go into lanes 0..15 of the
  tree.
- **Quantized**: a flit carries 32 INT8 values q. Because a block holds at least 64 elements,
  all 32 values of a flit share one scale s. `dequant_unit` produces q·s as BF16 in
  32 lanes.
- `reduction_unit` is a balanced binary tree of BF16 adders with one register per level.
  It takes log2(8) = 3 cycles and accepts one flit per cycle. It also outputs the sums of the
  two 4-input halves, which is the split for two concurrent 4-GPU groups. The rest of the
  design does not use these half sums yet (see section 8).
- `quant_unit` handles requantization:
  - Each block gets scale = RNE(amax/127).
  - Each element becomes q = round-half-away(x·127/amax), clamped to ±127.
  - A block can only be quantized after its largest magnitude is known. The unit therefore
    fills one block buffer while it drains the other. Throughput stays at one flit per cycle,
    and the latency is one block.
  - The block's scale goes with its first flit. The writer collects the scales into the
    wave's scale packet.

With 4 KB waves and a BlockSize of 64, one wave carries 4096 INT8 values and 64 two-byte scales
(128 B). That is exactly one scale packet, so the ratio is 4096+128 bytes on the link per
8192 bytes of BF16 data (1.94×).

## 6. Synchronisation

The sequence for one operation is:

1. A GPU writes its arrival flag as a write request with INC=1, addressed to the switch.
   `barrier_manager` absorbs the packet, sets that port's flag when the last flit arrives, and
   answers with a write response.
2. The wave controller polls the flags of all participants and starts once all are set.
3. After the last result write has been acknowledged (so the results are visible in every
   destination's memory), the controller writes the completion flag that the GPUs poll.

There is one flag per port, so the design has a single synchronisation resource.

## 7. Parameters and their defaults

| Parameter | Default | Where |
|---|---|---|
| NUM_PORTS | 8 | `scin_switch`, `in_switch_accelerator` |
| WAVES | 24 entries per table | ISA, wave tables |
| WAVE_BYTES | 4096 | ISA |
| SCALE_BYTES | 128 per entry | ISA |
| PAY_BYTES | 128-byte packet payload | ISA |
| flit | 32 bytes | `scin_pkg` |
| queue depths | 8 to 16 flits | ports, ISA |
| instruction slots | 16 | `instr_buffer` |

At the defaults, each table holds 24 × (4096 + 128) = 101,376 bytes, and the eight tables hold
about 792 KB. The tables are written as plain arrays, and a synthesis flow maps them to RAM.

## 8. Where this RTL departs from the published architecture

- **One TP8 *or* two TP4 groups.** The published ISA can run two 4-GPU All-Reduces at the
  same time by splitting the adder tree and the tables. Here the tree provides the half sums,
  but there is one wave controller with one instruction in flight. Two 4-GPU groups therefore
  run one after the other.
- **Link interface.** The physical and link layers are not part of this RTL. Each port's link
  side is a valid/ready flit stream. In the prototype these are serial transceivers and a link
  IP. The prototype also uses credit-based flow control between link buffers, which
  valid/ready replaces here.
- **Queue grouping.** Each message class keeps its header and its data in one queue (requests
  with write data, responses with read data). The published port has separate data queues.
- **Packet size.** The payload is 128 bytes, as in the simulated production-scale system. The
  FPGA prototype used 4 KB payloads, which was not simulated here. The header takes a whole
  32-byte flit.
- **Configuration.** The configuration is loaded over a register-style bus instead of JTAG.
- **Arithmetic format.** BF16 with RNE and flush-to-zero, INT8 with symmetric round-half-away
  scaling, and BF16 scales are this design's choices. The published text fixes only INT8,
  block-wise scales from the block maximum, and reduction in a fixed tree.
- **Block sizes.** The paper's accuracy study also lists 32 and 512. Only 64, 128 and 256 are
  supported.
- **Readout order.** Waves are read out strictly in issue order, and the completion flag has a
  fixed format. The arrival flag's address is ignored, because each port has one flag.
- **Switch core.** The paper names the switch core without detail. Here it is a
  non-blocking crossbar with round-robin outputs and no internal speedup.
- **Multi-switch topologies.** The production-scale evaluation connects eight accelerators
  through four switches. This RTL models one switch with all accelerators attached directly.

## 9. Verification

Every module has a self-checking testbench in `tb/`. Each one compares the outputs against a
model written independently of the RTL. The BF16 references in `ref_fp_pkg` use real
(double-precision) arithmetic rounded once. Each testbench ends with a `TB_RESULT` line and
has a watchdog. `accel_model` is a behavioural model of the GPUs:

- it holds their memory;
- it answers reads and writes after random delays, so responses return out of order;
- it writes arrival flags and polls completion flags.

`tb_scin_switch` runs the top level **at its default parameters** (8 ports, 24 × 4 KB waves,
128-byte packets) with eight GPU models. It runs five operations:

- A: a 112 KB BF16 All-Reduce (more waves than entries). Regular GPU-to-GPU traffic shares
  the links during this operation.
- B: a quantized All-Reduce with BlockSize 64.
- C: a Reduce to one GPU with a partial last wave.
- D: a quantized All-Reduce among four GPUs with BlockSize 128.
- E: the BF16 All-Reduce again, with one GPU answering 1500 cycles late.

Every result byte and scale is checked. The test also requires each mechanism to occur at
least once:

- a deferred wave;
- a barrier wait;
- a credit stall;
- out-of-order responses;
- an egress conflict between ISA and switch traffic;
- five completions.

Operation A must finish within 1.25× of the link bound. It takes 5882 cycles from the last
arrival to completion, against a bound of 5376: each 128-byte packet costs 6 link flits per
GPU. The run takes about two seconds of simulation time.

`tb_in_switch_accelerator` and `tb_wave_controller` run the accelerator alone with other
geometries. Their request monitors check the following:

- every packet address is read exactly once, with the right length and tag;
- nothing is read before the barrier releases it;
- every destination is written exactly once;
- the completion flag comes only after the last write.

For each testbench, a deliberately broken copy of its module was also simulated to make sure
the testbench detects the fault.

Simulating with plain Verilator (5.x), for example the top-level test:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/scin_pkg.sv rtl/scin_fp_pkg.sv tb/ref_fp_pkg.sv \
  $(ls rtl/*.sv | grep -v _pkg) tb/accel_model.sv tb/tb_scin_switch.sv \
  --top-module tb_scin_switch -o sim
./obj_dir/sim
```

For another testbench, replace the last file and the top-module name. The packages must come
first. Each testbench prints `TB_RESULT checks=<n> failures=<n>` as its last line.

## 10. Modifying the design

- `WAVES` may be raised to 128. The tag has a 7-bit entry field, and the packet field allows
  up to 256 packets per entry.
- `WAVE_BYTES` must be a multiple of `PAY_BYTES`. The quantized scales of one wave must fill
  whole flits (`SCALE_BYTES` = WAVE_BYTES / BlockSize × 2).
- `NUM_PORTS` must be a power of two for the adder tree. `MAX_ACC` = 8 fixes the instruction
  layout.
- Lint warnings about unused signals come from fields this design carries but does not
  consume: header fields of packets that the ISA absorbs, and the unused half-tree sums.
