# Open Packet Processor: a stateful match/action stage in SystemVerilog

An OpenFlow switch applies a stateless mapping: a header matches a table
row, and the row names an action. The Open Packet Processor (OPP) adds
per-flow memory to that mapping. Each flow carries a small *context*, made
of a state label and a few registers. Each packet then runs one step of an
*extended finite state machine* (XFSM): a TCAM row chooses the next state and
the action from the current state, the header fields and a set of
comparisons on registers. A bank of ALUs then computes new register values,
and the context is written back. Everything is built from a hash table, a
TCAM, comparators and small ALUs, and it takes a fixed number of clock
cycles. As a result the stage accepts one packet per clock.

This repository holds synthesizable SystemVerilog for one OPP stage and for a
4-port switch around it. It also has a self-checking testbench for every
block and for the whole switch.

## The switch around the stage

```
 rx beats (64 bit) x4                                            eg_desc x4
  -> opp_port_rx -> ingress FIFO ─┐                           ┌─> egress FIFO -> eg_pop
  -> opp_port_rx -> ingress FIFO ─┤ opp_mixer -> opp_metadata ─┬─> opp_stage ──action──> opp_action_block ─┤
  -> ...                          ┘ (round robin,  (timestamp)   └─> delay FIFO ──packet──┘                  └─> ...
                                     1 pkt/clock)
```

- **Port receivers (`opp_port_rx`)** take 64-bit beats with valid, last and a
  byte-keep mask. Each packet becomes a *descriptor*: its first 40 bytes
  (320 bits), its length in bytes and its input port. The descriptor comes
  out one cycle after the last beat.
  - The switch carries descriptors, not payloads. Bytes after the first 40
    are counted but not stored.
- **Ingress queues (`opp_fifo`, 16 deep)** buffer the descriptors. A
  descriptor that meets a full queue is dropped and counted in
  `status_q_drops`.
- **Mixer (`opp_mixer`)** serialises the four queues onto one 320-bit bus at
  one descriptor per clock, in round-robin order. The next grant goes to the
  first non-empty port after the one granted last.
- **Metadata (`opp_metadata`)** stamps each descriptor with a free-running
  32-bit cycle counter, its arrival time.
- **OPP stage (`opp_stage`)** produces one 16-bit action per packet, in
  order, 5 cycles after the packet enters. Meanwhile the descriptor waits in
  an 8-deep **delay queue**.
- **Action block (`opp_action_block`)** pairs each action with the head of
  the delay queue. The action type is in bits [15:12] and the port in [3:0]:
  - type 0 drops the packet;
  - type 1 forwards it to the port in [3:0];
  - type 2 floods it to every port except its input port.
- **Egress queues (16 deep)** hold the outgoing descriptors. The outside
  reads them with `eg_valid`/`eg_pop`.

A management processor programs everything through a single write-only bus,
`cfg` = {`we`, `addr[23:0]`, `wdata[31:0]`}. It is not part of this RTL.
The address splits into block `[23:20]`, entry `[19:5]` and word `[4:0]`;
the map is given further down. The status outputs give the processor what it
needs:
- the global registers;
- whether a housekeeping scan is running;
- counts of flow-table inserts and of failed inserts;
- counts of XFSM misses, dropped packets and queue drops.

## One packet through the stage

| cycle | block | work |
|---|---|---|
| 0 | `opp_extractor` | Ten shift-and-mask units cut the header fields H0..H7 and two 128-bit flow keys (*lookup* and *update*) out of the descriptor |
| 1 | `opp_flow_table` | Reads the candidate slot in each of the 4 hash ways for both keys, and searches the wildcard TCAM with the lookup key |
| 2 | `opp_flow_table` | Compares keys and selects the flow context: state, R0..R3 |
| 3 | `opp_cond_block` | Eight comparators give the condition bits C0..C7 |
| 4 | `opp_xfsm_table` | TCAM search on {input port, H3..H0, state, C} gives the next state, the action and five instructions |
| 5 | `opp_update_block` | ALU stage 1: operand select, differences, squares |
| 6 | `opp_update_block` | ALU stage 2: divisions and sums; the new context is written under the update key, and global register writes happen |

The action leaves at the end of cycle 4. The context write takes effect at
the end of cycle 6, six cycles after the flow-table read.

### The feedback window

The read-to-write loop is six cycles long, so a packet can miss the update of
an earlier packet. A packet sees an earlier packet's update only if it reaches
the flow-table read at least six cycles later. A closer packet reads the old
context, and its own write-back then overwrites the earlier one. The stage
does not forward results to close this gap. It relies on the mixer instead:
with N busy ports, two packets from one port are at least N cycles apart, and
six or more busy links are enough. With the four ports built here, a flow whose
packets come in on one port is safe as long as its packets are at least six
cycles apart, for example 48 bytes or more on a 64-bit port.
`tb_opp_stage` checks the window exactly: a second packet of the same flow
sees the first packet's update if and only if the gap is at least 6 cycles.
`tb_opp_switch` models the window and counts the cases where it changes the
result.

Global registers have the same window. Two packets in consecutive cycles that
both increment a global counter will lose one increment.

### Lookup key and update key

Reads use the lookup key. The write-back uses the update key, whose location
in the hash table (hit, way) is found during the same read cycle. For most
applications the two keys are the same, for example the source IP address.
They can differ: in a MAC-learning switch a packet reads the context of its
*destination* address and writes the context of its *source* address.

## Flow context table (`opp_flow_table`)

**Storage and lookup**
- A d-left hash table with 4 ways of 1024 slots (4096 entries) holds the
  exact-match contexts.
- An entry is a 128-bit key, a 16-bit state and four 32-bit registers, plus
  a 2-bit activity flag. The flags live in flip-flops, so the write cycle
  knows which slots are free.
- Way *w* hashes the key as follows: XOR-fold it to 32 bits, mix it, multiply
  by an odd constant for that way, and take the top 10 bits
  (`opp_pkg::hash_fold`).

**Misses**
- A key that is in no way is looked up in a 32-row wildcard TCAM. Its rows
  give default contexts, for example a different start state per protocol.
- A key found in neither gets state 0 and zero registers.

**Write-back and insertion**
- A key that was found is updated in place.
- A new key goes into the leftmost way whose slot is free.
- If all four candidate slots are taken, the insert is dropped and
  `ins_fail` counts it.

**Ageing**
- A write to control word 1 (bit 0 set) starts a housekeeping scan. The scan
  visits one slot index per cycle, in all ways at once.
  - ACTIVE entries become INACTIVE.
  - INACTIVE entries become DELETED.
- A lookup hit or a write marks an entry ACTIVE again. So an entry that is
  not used between two scans is freed by the second one.
- Deciding when to scan is left to the management processor.

**Memory ports.** The key and data memories need two reads per cycle (lookup
key, update key) and one write per cycle. An FPGA or ASIC build would map
them to a dual-ported RAM duplicated for the second read.

## Conditions, transitions, updates

**Condition block (`opp_cond_block`).** Comparator *i* compares two operands,
each chosen by a 4-bit operand code:

| code | operand |
|---|---|
| 0–3 | R0–R3 |
| 4–7 | G0–G3 |
| 8–15 | H0–H7 |

The comparison is one of `> >= = <= <`, taken as unsigned 32-bit numbers. A
comparator that is switched off outputs 0.

**XFSM table (`opp_xfsm_table`).** This is a 128-row TCAM with a 160-bit
key:

| bits | field |
|---|---|
| [7:0] | conditions C |
| [23:8] | state |
| [151:24] | H0..H3 (H0 lowest) |
| [159:152] | input port |

Each row is one transition, and any key bit can be a don't-care. The
lowest-numbered matching row wins and returns a 192-bit word:

| bits | field |
|---|---|
| [15:0] | next state |
| [31:16] | action |
| [32+32i +: 32] | instruction i, for i = 0..4 |

If no row matches, the packet gets the default action from the control block
and its context is left alone.

**Update block (`opp_update_block`, five `opp_alu`).** Instruction format:
opcode in [31:24], operand codes A/B/C/D in [23:20]/[19:16]/[15:12]/[11:8],
and a 16-bit immediate in [15:0].

| opcodes | effect |
|---|---|
| NOT, XOR, AND, OR | `A <- B op C` |
| ADD, SUB, MUL, DIV | `A <- B op C` |
| ADDI, SUBI, MULI, DIVI | `A <- B op imm` |
| LSL, LSR, ROR | `A <- B shifted by imm[4:0]` |
| AVG | A = count, B = running mean, C = sample |
| VAR | as AVG, plus the running variance in C; the sample is D |
| EWMA | A = last timestamp, B = value, C = new timestamp, D = increment; the value is shifted right by the elapsed time and the increment added |

Rules for the arithmetic:
- Divisions are 16-bit, which keeps the ALU at two cycles. AVG/VAR divide
  the magnitude of the signed difference, saturated to 16 bits, by the count
  plus one, also saturated.
- A division by zero gives 0xFFFF.
- All five ALUs read the values from before the transition.
- If two writes hit the same register, the higher-numbered ALU wins.
- Writes to a header-field code are dropped.

Opcode values are listed in `opp_pkg::opcode_e`.

**Global registers (`opp_global_regs`).** Four registers shared by all flows.
The management processor writes them to set thresholds and constants, and the
ALUs write them for switch-wide counters or times. If both write the same
register in the same cycle, the ALU wins.

## Configuration map

| block `[23:20]` | entry | words |
|---|---|---|
| 0 extractor | 0–7 header field i | 0 bit offset into {port, length, timestamp, header}, 1 mask |
|             | 8 lookup key, 9 update key | 0 offset, 1–4 mask (128 bits, LSW first) |
| 1 conditions | i | 0: `{op[10:8], b[7:4], a[3:0]}` with op 0 off, 1 `>`, 2 `>=`, 3 `=`, 4 `<=`, 5 `<` |
| 2 globals | i | 0: value |
| 3 flow-table TCAM | row | 0–3 key, 4–7 care mask, 8–12 context (state in the low 16 bits, then R0..R3, then flags), 13 valid |
| 4 XFSM TCAM | row | 0–4 key, 5–9 care mask, 10–15 result, 16 valid |
| 5 control | 0 | 0 default action on an XFSM miss, 1 bit 0 starts a scan |

In the extraction vector the header occupies bits 0–319, with byte 0 in bits
[7:0]. Above it are the timestamp (bits 320–351), the length (352–367) and
the input port (368–369). A header field can therefore select the packet's
arrival time, which is how timeouts and rate measurements are written.

## Verification

Run a testbench with plain Verilator from the repository root, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/opp_pkg.sv tb/tb_opp_switch.sv --top-module tb_opp_switch
obj_dir/Vtb_opp_switch +verilator+rand+reset+2
```

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
`tb/opp_tb_cfg.svh` holds tasks that write the configuration map above.

**Unit tests.** Every block has a testbench `tb_<module>`. Most compare
against a behavioural model under random stimulus:
- the FIFO, receiver, mixer, metadata, extractor, TCAM, comparators, ALU,
  update merge, global register file and action block;
- the flow table, with a reduced 64-entry table so that collisions, TCAM
  defaults and ageing are all frequent.

**Stage test.** `tb_opp_stage` runs the default-size stage with a port-scan
monitor:
- a TCP SYN from an unknown source moves it to MONITOR;
- an EWMA of the source's SYN rate is compared with G0, and the source moves
  to DROP when the rate reaches G0;
- the DROP ends once the packet timestamp passes the end time set from G1.

It checks every action against a model, checks the 5-cycle action latency,
and checks the exact 6-cycle feedback window.

**Token-bucket test.** `tb_opp_token_bucket` runs a per-flow policer on the
default-size stage. R0 and R1 hold a window [Tmin, Tmax] of token times.
G0 = B·Q and G1 = Q, where B is the bucket size and Q the token interval.
Four XFSM rows cover the cases:
- the first packet of a flow;
- arrival inside the window, which shifts the window by Q;
- arrival after the window, which refills the bucket;
- arrival before the window, which drops the packet.

The test checks each action against a model, and checks that no flow gets
more than its bucket plus its tokens.

**Classifier test.** `tb_opp_classifier` runs a decision-tree traffic
classifier on the default-size stage. Per flow it keeps:
- the packet-size mean and variance, computed with VAR (R0..R2);
- the byte count (R3).

At the decision time the flow is put in one of two classes by three threshold
conditions. The original formulation needs two things this design lacks:
- a per-flow decision time in a fifth register, which the test replaces with
  a global time in G0;
- DSCP marking, which the test replaces with the choice of output port.

**Switch test.** `tb_opp_switch` drives all four ports at once with the
default sizes. It programs a learning switch:
- lookup on the destination MAC address, update on the source MAC address;
- TCAM-defaulted blocked destinations, which drop through an XFSM miss;
- a timestamp copy into G1.

It compares every egress descriptor with a model and runs two housekeeping
scans between two traffic phases. It fails if any of these never occurs:
port interleaving, flooding, forwarding, dropping, re-learning after ageing,
or a packet affected by the feedback window.

## Departures and limits

- **Descriptors, not packets.** The switch carries only the first 40 bytes,
  the length, the port and the timestamp. There is no payload buffer and no
  Ethernet MAC.
- **Actions.** The action block knows drop, forward and flood only. There is
  no header rewrite (for example setting DSCP).
- **Management processor.** It is not included. Its bus is the `cfg` port.
  Reads of the tables are not supported; the status ports carry the counters.
- **Four flow registers.** The context has four flow registers, so an
  application that needs a fifth, for example a per-flow deadline next to
  four feature registers, must be reworked to fit.
- **Feedback window.** There is no hazard logic. Same-flow packets closer
  than six cycles see old state, as described above.
- **TCAMs.** The TCAMs are flip-flop arrays with a priority encoder. That
  suits the 32- and 128-row sizes here, not the hundreds of thousands of rows
  an ASIC TCAM would hold.
- **Own choices.** These are choices of this design and can be changed
  freely:
  - the hash functions;
  - the one-entry buckets;
  - the encodings: opcodes, actions, operand codes, XFSM key layout;
  - the ALU saturation rules;
  - the "last ALU wins" rule.
