# VeBPF many-core: eBPF firewall rules on a dozen small cores

A packet filter written as eBPF rules normally runs one rule after another on a
CPU. This design runs those rules in hardware instead: it keeps N small
eBPF-executing cores (12 by default) next to the Ethernet receive path. Only
the header of each received packet matters to a filter. So the header is cut
off while the whole packet streams to memory, and the same header is copied
into every core's data memory. The cores then each run a different rule on
that header, in parallel.

Reprogramming a core must cost next to nothing. To achieve this, every rule of
the rule set is preloaded into every core's program memory. Starting rule k on
a core then only means loading that core's program counter with the address of
rule k while the core is held in reset, which takes one clock cycle. A
scheduler hands out rules to idle cores and collects their verdicts. The first
verdict that decides something ("drop", "store", "error") ends the work on that
packet. A verdict of "don't care" from every rule also ends it. The verdict is
written into the packet's descriptor, where a management CPU (a RISC-V in the
reference system) reads it instead of inspecting the packet itself.

Everything here is synthesizable SystemVerilog (IEEE 1800-2017). It needs only
`verilator` 5 to simulate. The reference system's other parts have no RTL here:
the host RISC-V, the Ethernet MAC/PHY, the DRAM controller, and the custom call
accelerators the cores can invoke. Their signals are ports of
`vebpf_manycore_top`.

## Data flow at a glance

```
 AXI-stream RxPkt ──► pkt_slicer ──► whole packet ──► dma ──► mem_bus_grant ──► packet memory
                          │                             │          ▲
                          │                             ▼          └── RISC-V memory master
                          │                        desc_table ◄── result (verdict)
                          ▼                             ▲
           headers FIFO + length FIFO                   │ read / clear
                          │                        mplane_csr ◄──► RISC-V MMIO
                          ▼
                     data_loader ══ shared data bus ══► core 0 … core N-1 (data memories)
                                                          ▲   │ Halt/Error/R0
 UART ► uart_rx ► rules_parser ► rules FIFO ► instr_uploader ══ shared program bus ══╝   │
                        └──► rule_meta_table ───────────┐                               │
                                                        ▼                               ▼
                                scheduler (arbiter + core_selector + tracker + DEMUX) ──► result_analyzer
```

Every box is one module file in `rtl/` whose name starts with `vebpf_`. The
modules share one package, `vebpf_pkg`, which holds the eBPF encodings, the
decoded-instruction struct and the verdict codes.

## The eBPF core (`vebpf_core`)

The core is a small multi-cycle machine with a Harvard memory layout:

- a 64-bit-wide program memory of `PGM_DEPTH` words (default 4096, from the
  12-bit program address);
- an 8-bit-wide data memory of `DATA_DEPTH` bytes (default 2048, from the
  11-bit data address);
- eleven 64-bit registers R0–R10.

It does not pipeline. Each instruction is fetched, then executed:

| instruction class                | cycles        |
|----------------------------------|---------------|
| ALU / ALU64, jumps, `exit`       | 2             |
| `lddw` (64-bit immediate)        | 3             |
| load of n bytes (`ldx`)          | 2 + n + 1     |
| store of n bytes (`st`, `stx`)   | 2 + n         |
| `call`                           | 2 + handler latency |

Memory accesses move one byte per cycle because the data memory is 8 bits
wide. `Ticks_out` counts cycles from the release of reset up to and including
the cycle of `exit`.

**Rule switch in one cycle.** While `reset_in` is high the core is idle, and
its PC follows a small mux: `ip_next_eBPF_rule_in` when
`enable_new_eBPF_rule_in` is high, otherwise 0. The scheduler pulses the enable
for one cycle with the start address of the chosen rule. It then releases
reset, and execution starts at that address on the next clock.

**Registers at reset.** R1–R5 are input registers. During reset they load
`R1_in..R5_in`, and they are not cleared. The top drives R1 with the header
length in bytes and R2–R5 with zero. R0, R6–R9 clear. R10 (the eBPF frame
pointer) is set to `DATA_DEPTH`, so a program's stack grows down from the top
of data memory.

**The header is at address 0.** The header of the current packet sits in data
memory from address 0 (byte 0 = first byte on the wire). Bytes beyond the
header length still hold whatever an earlier packet left there. A rule must
therefore check R1 or the packet type before it reads a field that a short
header may lack. For example, a rule that reads the IP protocol byte without
first checking for IPv4 would read stale bytes on an ARP packet.

**End of a rule.** After `exit`, `Halt_out` is high and R0 holds the verdict.
`Error_out` is raised together with the halt in three cases:

- an encoding this core does not implement (the legacy packet-access loads and
  the atomics);
- a data access outside the data memory;
- a PC beyond the program memory.

**Calls.** `call imm` raises `call_req` with `call_id = imm`. The core then
waits for `call_ack`, and the 64-bit `call_result` becomes R0. These ports
are where application-specific accelerators attach. The top brings them out
per core.

**Data memory writes.** The shared data bus writes the data memory through
`vebpf_pkt_loader`. It turns one 64-bit bus word into eight byte writes
(little-endian) and accepts a word only while the core is in reset.
`vebpf_pgm_mem` answers the program bus in the same way, one 64-bit word per
write.

## Getting packets in: slicer, DMA and descriptors

**Slicer (`vebpf_pkt_slicer`).** The slicer takes 64-bit AXI-stream beats from
the MAC and passes them on to the DMA at one beat per cycle. While doing so it
copies the first header words into the headers FIFO and the header length into
the length FIFO. The header length depends on the packet type:

- a custom length written by the CPU (CSR 0x08), if it is non-zero;
- otherwise, for IPv4: 14 + IHL·4, plus 8 for UDP or ICMP, 20 for TCP, or 0
  for other protocols;
- otherwise, for any other EtherType: 14.

The result is capped at `MAX_HDR_BYTES` (128) and at the packet length.

Timing makes this possible. The EtherType and IHL arrive in beat 1 and the IP
protocol in beat 2, so the length is known before any beat it could cut.

The slicer accepts a packet only when all of these hold:

- the headers FIFO has room for a full header;
- the length FIFO has room;
- the DMA has cleared the previous packet.

**DMA (`vebpf_dma`).** The CPU gives a packet region as a start address and a
size; writing the size arms the DMA. The DMA treats the region as a ring. It
admits a packet only when both of these hold:

- at least `MAX_PKT_BYTES` (1536) are free, since the length is only known at
  the end;
- the descriptor table has a free entry.

It then requests the memory bus from `vebpf_mem_bus_grant`, a two-way
round-robin arbiter between the DMA and the CPU that keeps a grant while its
owner holds the request. It writes the beats with byte strobes, wrapping at the
end of the region, so one packet may straddle the wrap point. Finally it
appends (index, start, length) to `vebpf_desc_table`. Used memory is counted in
8-byte units. When the CPU clears a descriptor, that entry's memory is given
back. If the CPU does not clear descriptors, the DMA stalls and the stall
reaches the MAC as `tready` low.

**Descriptor table (`vebpf_desc_table`).** The table is a FIFO of `DESC_DEPTH`
(16) entries. Each entry has a result field and a valid bit. The result
analyzer fills the result of the oldest entry that has none yet, so verdicts
line up with descriptors in arrival order.

## Shared buses: one write, N acknowledgements

Both the data bus (header words) and the program bus (instructions) reach all
N cores at once. Each write uses a four-phase handshake:

1. The master drives data, address and enable.
2. It waits until the AND of all N ACKs is high.
3. It drops the enable.
4. It waits until the OR of the ACKs is low.

A slow core thus holds up the bus but can never miss a word. Each core
writes its data memory one byte per cycle, so a 64-bit header word takes about 12 cycles (8 byte writes plus the handshake). A 42-byte UDP
header (6 words) therefore loads in about 70 cycles. That is most of the
time the engine spends on a packet.

## Uploading a rule set

Rules arrive from the host over a UART (115200 baud at 100 MHz,
`CLKS_PER_BIT` = 868). The byte protocol is this design's own:

| byte            | meaning                                                    |
|-----------------|------------------------------------------------------------|
| `01` b0…b7      | one 64-bit instruction, little-endian                      |
| `02`            | end of the current rule                                    |
| `03`            | end of the rule set                                        |
| `04`            | start a new rule set (drops the old one)                   |
| anything else   | error; the parser stays in error until the next `04`       |

`vebpf_uart_rx` turns bytes into pulses. `vebpf_rules_parser` pushes every
instruction into the rules FIFO and records each rule's (start, length) in
`vebpf_rule_meta_table`. The start is the rule's running instruction number.
It is also where the uploader will put the rule in program memory, so the
table's start pointer is directly the PC the rule begins at. Rules are
position-independent eBPF (relative jumps only), so no relocation is needed.

After `03`, `vebpf_instr_uploader` drains the FIFO over the program bus:
instruction k goes to address k in every core. It then raises
`All_eBPF_rules_uploaded_flag`, which stays high until a new rule set starts.
Each instruction takes 9 bytes on the wire, about 0.8 ms at 115200 baud, so
the UART, not the bus, limits upload speed.

**Changing rules at run time.** Send `04` and a new set. The upload flag falls
at once, so no new header is loaded until the new set is in place. The program
bus, however, writes memories regardless of core state. A rule still running
on the old set would then execute a mix of old and new instructions. Change
sets between packets, or accept that the packet in flight at the moment of the
switch may get a meaningless verdict.

## The scheduler: handing out rules

The scheduler is the part that needs the most care. Its task: given T rules
and N cores, start rules 0…T−1 on whichever cores are free, as early as
possible. Collect each verdict as it comes. Stop everything the moment a
verdict decides the packet. Its four parts are below.

**Arbiter (`vebpf_arbiter`).** It sees one "available" bit per core. For a
request, it answers one cycle later with a one-cycle grant pulse and an 8-bit
core id. It picks round-robin starting after the last granted core, so work
spreads over all cores.

**Core selector and re-programmer (`vebpf_core_selector`).** It waits until a
header is loaded and the rule set is uploaded, then walks the rule index. Each
rule goes through four states:

- REQ: request a core;
- grant: the arbiter answers;
- PROG: the `en_ip_next` pulse goes to the granted core through the DEMUX,
  with the rule's start address from the metadata table, and the tracker is
  asked to run that core;
- ACK: the tracker acknowledges, and the index moves on.

So while cores are free, a new rule starts every 4 cycles. When no core is
free, REQ simply waits. After the last rule it idles until the packet is
decided.

**DEMUX (inside `vebpf_scheduler`).** The grant id selects which core sees
`en_ip_next`. All cores see the same 12-bit address.

**Tracker and rules-runner (`vebpf_tracker`).** It owns every core's reset
line. A core not running a rule is held in reset, and that is what "available"
means. On the selector's request it releases that core and marks it running.
It watches all `Halt_out` lines at once. In each cycle it takes the
lowest-numbered halted core and does four things:

1. forwards the core's verdict (R0's low byte, or ERROR if `Error_out` is set)
   with a one-cycle flag;
2. counts the rule as finished;
3. puts the core back into reset;
4. makes the core available again.

Halts that arrive together are thus serialised, one per cycle. When the
analyzer registers a result, every core goes back into reset at once.
Unfinished rules are abandoned, and the counters restart for the next packet.

**Why the count is "finished", not "started".** The analyzer accepts "don't
care" as final only when the number of rules counted equals the total. The
reference architecture's name for this count suggests rules reprogrammed (started). With that
reading, the last rule being *started* would let an earlier "don't care"
result close the packet while the last rule, possibly a "drop", was still
running. Here the tracker counts rules whose verdicts came back. The count
includes the verdict that arrives in the same cycle, so the last verdict
decides. The scheduler still exports the number of rules started for
observation.

A worked example follows: the 17-rule firewall below on 12 cores. Rules 0–11
start at cycles 0, 4, …, 44 after the header is loaded. A short rule finishes
in about 15–25 cycles, so rules 12–16 find free cores immediately and the
selector never stalls. The whole walk takes about 70 cycles, plus the tail of
the last rule.

## Deciding: the result analyzer

Verdicts are the low byte of R0:

| code | meaning        |
|------|----------------|
| 0    | don't care     |
| 1    | drop packet    |
| 2    | store result   |
| 3    | error (also forced by the tracker when a core faults) |

Other codes are treated like "store result". `vebpf_result_analyzer` decides
on the first verdict that is not "don't care", without waiting for the other
rules. It also decides on a "don't care" that completes the count of rules.
One cycle later it does three things:

- writes the verdict into the descriptor table;
- pulses `VeBPF_result_registered_flag`, which makes the scheduler flush;
- pulses `VeBPF_load_next_rxpkthdr_flag`, which makes the data loader fetch the
  next header.

It registers exactly one verdict per header. Verdicts that trail in before the
flush are ignored.

The order of verdicts therefore depends on timing: which core finishes first
wins. If two rules could give different decisive verdicts for the same packet,
the result is whichever finishes first. Write rule sets whose decisive rules do not
conflict.

## Management plane (`vebpf_mplane_csr`)

The CPU reaches the engine through a simple 32-bit register port: write on
`mmio_we` at the clock edge, combinational read. The register map is this
design's own:

| addr | access | content |
|------|--------|---------|
| 0x00 | RW | packet region start address (multiple of 8) |
| 0x04 | RW | packet region size in bytes; writing it (re)arms the DMA one cycle later |
| 0x08 | RW | custom header length (0 = by packet type) |
| 0x0C | R  | [15:0] descriptors held, [16] rule set uploaded, [17] upload error |
| 0x10 | R  | head descriptor: packet index |
| 0x14 | R  | head descriptor: start address |
| 0x18 | R  | head descriptor: length in bytes |
| 0x1C | R  | head descriptor: [7:0] verdict, [8] verdict valid |
| 0x20 | W  | clear the head descriptor and free its memory |
| 0x24 | R  | free packet memory in bytes |

A typical driver loop runs as follows:

1. Wait for 0x0C[15:0] to be non-zero and 0x1C[8] to be set.
2. Act on the verdict, reading the packet from memory if it wants.
3. Write 0x20.

## Timing and line rate

The design has one clock domain and no clock frequency of its own; 100 MHz is
assumed below. The times below are measured in simulation, from the header
load starting to the verdict being registered, with 12 cores:

| rule set | rules | worst case seen |
|----------|-------|-----------------|
| type 1: four blocked source-IP prefixes | 4 | 125 cycles |
| type 2: nine blocked UDP service ports | 9 | 137 cycles |
| type 3: four blocked file-system UDP ports | 4 | 117 cycles |
| type 4: all 17 rules | 17 | 172 cycles |

These are the worst cases over mixed traffic and over 2000 matching packets
per rule set.

The reference workload is 100 Mb/s Ethernet. The smallest frame (64 bytes plus
20 bytes of preamble and inter-frame gap) takes 672 ns, which is 672 cycles at
100 MHz. The engine therefore keeps up with minimum-size frames with about a
4× margin, and larger frames only widen it (a 1500-byte frame leaves 12,320
cycles). The top-level testbench checks this directly: it sends 64-byte frames
at exactly 672-cycle spacing and requires every verdict within 672 cycles.

Latency grows with the number of rules beyond N. It also grows with rule
length, and it is bounded by the longest rule. A rule with a loop over the
whole header (R1 bytes) costs about 12 cycles per byte.

## Parameters

All parameters sit on `vebpf_manycore_top`:

| parameter | default | meaning |
|---|---|---|
| `N_VEBPF` | 12 | number of cores |
| `PGM_DEPTH` | 4096 | instructions per program memory (total across all rules) |
| `DATA_DEPTH` | 2048 | bytes of data memory per core |
| `CLKS_PER_BIT` | 868 | UART bit time in clocks |
| `HDR_FIFO_DEPTH` | 64 | headers FIFO, 64-bit words |
| `LEN_FIFO_DEPTH` | 16 | header-length FIFO entries |
| `RULES_FIFO_DEPTH` | 4096 | rules FIFO, instructions |
| `MAX_RULES` | 4095 | rules per set (12-bit count) |
| `DESC_DEPTH` | 16 | descriptor table entries |
| `MAX_HDR_BYTES` | 128 | header length cap |
| `MAX_PKT_BYTES` | 1536 | free memory required to admit a packet |

Only the core count of 12 and the bus widths come from the reference design.
The depths are chosen here. The data memory could be cut to `MAX_HDR_BYTES`
plus stack space to save memory. The default keeps the full 11-bit address
range.

## Where this differs from, or adds to, the reference architecture

These follow the architecture as described:

- the block structure;
- the shared program and data buses with AND-reduced ACKs;
- single-cycle rule switching through the PC mux;
- the scheduler's arbiter / selector / tracker / DEMUX split;
- the result analyzer's decision rule;
- descriptors carrying verdicts;
- the flag names.

The following are this design's own, since the description does not give them:

- All handshakes (four-phase bus writes, req/ack between selector and tracker,
  one-cycle pulses).
- The UART byte protocol.
- The register map.
- The verdict codes.
- The header-length rule per packet type.
- The DMA ring and admission rule.
- The round-robin policies.
- The eBPF subset. The legacy packet loads and atomics are not implemented.
  Division by zero follows the current eBPF rules.

These points are deliberate departures:

- The count of rules compared with the total is the count of finished rules,
  not of started rules (see the scheduler section). The architecture's wording
  would let a "don't care" close a packet while the last rule still runs.
- The metadata table is read by index, not popped. Every packet needs the
  whole rule list again.
- Cores still running when a packet is decided are reset and their work is
  discarded. The description does not say what happens to them.
- Each core's `Ticks_out` cycle counter is available on the core, but the
  tracker does not collect it. Only R0, `Halt_out` and `Error_out` travel to
  the result analyzer, and the descriptor holds no cycle count.

Not included:

- The host RISC-V, its UARTs and instruction mux.
- The Ethernet controller.
- The memory controller and DRAM.
- The custom call handlers.

These are outside the engine and appear as ports or testbench models. FPGA
resource use has not been measured against an FPGA flow. The reference
reports about 3500 LUTs and 1600 flip-flops per core on an Artix-7.

## Simulating

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. With plain
verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb rtl/vebpf_pkg.sv \
    tb/tb_vebpf_manycore_top.sv --top-module tb_vebpf_manycore_top
./obj_dir/Vtb_vebpf_manycore_top
```

**`tb_vebpf_manycore_top`** runs the whole engine with 12 cores and a fast
UART. It models the host memory and a CPU driver, and it checks every verdict
against a reference computed in the testbench from the packet bytes. Packets
are UDP, TCP, ICMP and ARP with random fields, plus frames built to hit each
rule. The test runs through these phases:

1. a bad UART byte;
2. upload of the 17-rule firewall;
3. random traffic;
4. the CPU stops clearing descriptors, until the descriptor table fills;
5. the CPU stops again with large packets, until packet memory fills;
6. 30 minimum-size frames at line rate;
7. a run-time switch to a second rule set.

The second rule set contains a rule that faults, a rule that uses `call`, and
13 copies of a rule that loops over the header, so all cores are busy. The
testbench counts each mechanism and fails if one of them never occurred. The
mechanisms are drop, don't-care, store and error verdicts, rules abandoned on
an early decision, all cores busy, bus contention with the CPU, DMA full,
descriptor table full, ring wrap, MAC stall, call, UART error and rule reload.

**`tb_vebpf_manycore_top_full`** instantiates the top with every parameter at
its default (12 cores, 868-clock UART bit). It uploads the four source-IP
rules over the real-speed UART. It then sends 24 random packets of 64–1500
bytes and 10 back-to-back 64-byte frames, checking verdicts and the 672-cycle
bound. It runs in a few seconds.

**`tb_vebpf_firewall_workloads`** is the firewall evaluation. It uses the
default-size engine, except for a faster UART. It runs each of the four rule
sets in turn: source addresses, nine UDP service ports, four file-system UDP
ports, and all 17 together. Each set gets 2000 packets that each match one of
its rules. Packet sizes are drawn from 64, 128, 256, 512, 1024 and 1500 bytes,
and packets are paced at 100 Mb/s. The test checks four things: every packet
is dropped; descriptors return in order; each packet is taken in before the
next is due; and every decision comes within 672 cycles. It reports the worst
decision time per rule set. It takes a couple of minutes.

The firewall rules in the testbenches are built by small SystemVerilog
functions (`match_rule`, `type1`, `set_a`). They are ordinary eBPF: load the
EtherType, check for IPv4, check the IP protocol, load a field, mask it,
compare, then `mov r0, verdict; exit`. A source-IP rule is 9 instructions and a
UDP-port rule 11.
