# ID-MAC: an instruction-directed token MAC for the classical plane of a multi-chip quantum processor

A quantum processor built from many small quantum cores (QCs) needs a classical network next to its quantum links. A central control unit (CU) uses it to send the program to the cores. The cores use it to exchange the two correction bits that every quantum teleportation produces. Here that network is a single broadcast wireless channel inside the cryostat, shared by the CU and every core.

Classical token passing visits every core in turn, including the many that have nothing to send, so the medium sits idle while the token travels. In the ID-MAC scheme the compiler already knows which teleportations run in a bundle, so the order of access travels with the instructions:

- Every teleportation-source instruction (TPS) carries a *token order* `to` (0, 1, 2, ...).
- The core holding order `k` waits until it hears token `k`, sends its correction bits, then sends token `k+1`.
- The token jumps straight from one sender to the next. Cores with nothing to send never see it.
- During instruction dispatch only the CU transmits, so no arbitration is needed at all.

This repository gives synthesizable SystemVerilog for the whole digital control plane:

- the CU's fetch/decode, dispatcher and EPR controller;
- one local control unit (LCU) per core, with its three instruction buffers;
- the digital side of every wireless interface;
- the shared channel.

The qubits, the EPR-pair generator, the photonic links, the radio front end and the off-chip DRAM are outside the RTL. Their interfaces are ports of the top module `idmac_system`.

## Configuration

All sizes live in `rtl/idmac_pkg.sv`. Module parameters cover the buffer depths and the timing.

| constant / parameter | default | meaning |
|---|---|---|
| `N_QC` | 100 | quantum cores (the largest system evaluated for ID-MAC) |
| `QPC` | 16 | physical qubits per core |
| `N_GATE_TYPES` | 16 | instruction set size (4-bit gate field) |
| `FLIT_W` | 12 | bits per cycle on the channel: 12 Gb/s at a 1 GHz clock |
| `DECODE_CYCLES` | 10 | CU decode time per instruction (10 ns) |
| `LIB_DEPTH`, `TPSB_DEPTH`, `TPDB_DEPTH` | 16 each | LCU buffers, one entry per qubit of a core |
| `EPR_DEPTH` | 4 | EPR configuration queue in the CU |
| `ADDR_W` | 16 | instruction memory address width |

One cycle is 1 ns throughout, so a 10-bit token packet takes exactly one cycle on air. That matches the 1 ns token-pass time the scheme assumes.

The derived field widths are:

| field | width |
|---|---|
| core address `QC_W` | 7 bits |
| local qubit `QB_W` | 4 bits |
| absolute qubit (core, local) `ABS_W` | 11 bits |
| token order | 7 bits |

To change the system size, edit `N_QC` or `QPC` in the package. Every width follows from them.

## Program format

The instruction memory holds a sequence of bundles. A bundle is a set of operations that may run in parallel. Memory words are `INSTR_W` = 26 bits wide, with instructions left-aligned.

- **Header word:** `NI`, the number of instructions, in the low 11 bits. `NI = 0` ends the program.
- **General instruction:** `{qc[7], gate[4], q1[4], q2[4]}`. `q2` is unused for one-qubit gates.
- **TPS** (gate `4'hE`): `{qc[7], gate[4], qs[4], qd[11]}`.
  - `qs` is the local qubit being teleported.
  - `qd` is the *absolute* address (core, local) of the destination qubit.
- **TPD** (gate `4'hF`): `{qc[7], gate[4], q[4]}`. `q` is the local qubit that receives the state.

A remote two-qubit gate is compiled into a TPS on the source core, a TPD on the destination core and a local gate. The CU does not look inside any gate code except TPS and TPD.

## Packets on the channel

Every packet starts with a 3-bit type. It is sent most significant bit first in 12-bit flits. The receiver finds the length from the type.

| type | code | fields after the type | bits | flits |
|---|---|---|---|---|
| LIP: local instruction | 0 | general instruction | 22 | 2 |
| TPDIP: TPD instruction | 1 | TPD instruction | 18 | 2 |
| TPSIP: TPS instruction | 2 | TPS instruction, `to` | 36 | 3 |
| CBP: correction bits | 3 | destination absolute qubit, 2 bits | 16 | 2 |
| TP: token | 4 | `to` | 10 | 1 |
| EOCP: end of computation | 5 | core id | 10 | 1 |

In the RTL a packet is a 36-bit vector with the type in bits 35:33 and the fields below it. `idmac_pkg` has one builder and one set of extractors per type.

## One bundle, step by step

### Dispatch phase

The control unit:

1. reads the header;
2. for each instruction, reads it, spends 10 cycles decoding it and hands it to the dispatcher.

The dispatcher:

- turns a TPS into a TPSIP, giving it the next token order (0, 1, 2, ...). Before sending it, it pushes the (source core, destination core) pair into the EPR queue, so the pair generation can start early.
- turns a TPD into a TPDIP;
- turns anything else into a LIP.

Packets go out one at a time, since only the dispatcher transmits in this phase. When the bundle is done, the dispatcher broadcasts **TP(to = 0)**. This closing token ends the dispatch phase for everyone.

Each LCU listens to every packet and keeps those addressed to its core:

- LIP entries go to the **LIB**, a FIFO.
- TPDIP entries go to the **TPDB**, an associative buffer keyed by qubit.
- TPSIP entries go to the **TPSB**. This buffer is kept sorted by `to` through register insertion sort, so its head is always the core's next turn.

### Execution phase

A core that received at least one instruction enters execution when it hears TP(0). Three processes then run at once:

- **Local gates:** the LIB drains one instruction at a time into the qubit port `loc_*`.
- **Teleportation sources:** the TPSB head runs when its `to` equals the last token value heard on the channel. A head with `to = 0` runs at once.
  1. The source half runs on `tps_*` and returns two correction bits.
  2. The LCU queues a CBP addressed to the destination qubit.
  3. Right behind it, the LCU queues TP(to + 1).

  Both are *scheduled* accesses, and the protocol guarantees that only one core holds such an access at a time. A CBP plus token costs 3 cycles of air time. The next source can start as soon as it hears its token.
- **Teleportation destinations:** a TPD waits in the TPDB until a CBP names its qubit. It then runs the correction on `tpd_*` with those bits. TPDs complete in whatever order their bits arrive.

When all three buffers are empty and nothing is in flight, the core sends an **EOCP** and leaves execution.

The CU remembers which cores it sent instructions to. It fetches the next bundle once every one of them has reported.

### How the token moves

The token holder is implicit: each core tracks the last TP value heard, in `tok_q` inside `lcu`. Nobody hands the token to a core by address. So "skipping" idle cores costs nothing: token `k+1` is simply the next packet after CBP `k`, and only the core whose TPS carries `to = k+1` reacts to it.

Two conditions make this safe:

- Token orders are unique within a bundle.
- A core sends TP(k+1) only after its CBP, and only when it owns order `k`.

If a schedule is ever broken, two scheduled requests appear at once. The channel then raises the sticky `sched_conflict` flag.

### End-of-computation packets

EOCPs are not in the compile-time order: any core may finish at any time. They are the only *unscheduled* accesses. The channel grants them round-robin, only when no scheduled request is waiting, and each owner keeps the medium until its packet is complete. A burst of EOCPs therefore delays neither a token hand-over nor each other beyond their own air time.

## Blocks

| file | role |
|---|---|
| `idmac_pkg.sv` | sizes, instruction and packet types, packet builders and field extractors |
| `idmac_system.sv` | top: CU + CU wireless interface on channel port 0; per core an LCU + wireless interface on port 1+i |
| `control_unit.sv` | bundle fetch, decode timing, involved-core bookkeeping, wait for EOCPs |
| `dispatcher.sv` | packet building, token-order assignment, closing token |
| `epr_ctrl.sv` | queue of (source, destination) EPR configurations; dispatch stalls when full |
| `wireless_interface.sv` | packet ↔ flit conversion, request/grant to the channel |
| `winoc_channel.sv` | broadcast medium: registered grant, scheduled-first arbitration, round-robin for EOCPs, collision detection |
| `lcu.sv` | per-core protocol processes, token tracking, error flag |
| `lib_fifo.sv` | LIB (also used as the EPR queue) |
| `tpsb.sv` | TPS buffer sorted by token order |
| `tpdb.sv` | TPD buffer matched by qubit |

### Interfaces and timing of the top

- `start` / `start_addr` run a program. `done` rises after the header with `NI = 0`. `bundles` counts finished bundles.
- `mem_rd_en` / `mem_addr` issue one read, which `mem_rvalid` / `mem_rdata` answer after any latency.
- `epr_cfg_valid` / `epr_cfg_ready` / `epr_cfg_src` / `epr_cfg_dst` configure one EPR pair.
- `q_loc_*`, `q_tps_*` and `q_tpd_*` are arrays over cores. In each, valid and the instruction stay up until the one-cycle done pulse. `q_tps_cb` returns the measured bits with `q_tps_done`, and `q_tpd_cb` carries the bits a correction needs.
- `qc_exec`, `qc_tok_wait` and `qc_error` show each core's phase, a TPS blocked on its token, and buffer trouble (sticky). `collision` and `sched_conflict` must stay low.

Cycle counts:

| step | cost |
|---|---|
| instruction dispatch | 1 read cycle + memory latency + 10 decode + 1 handover; 13 cycles per instruction with a one-cycle memory, since packet transmission overlaps the next fetch |
| channel request to grant (medium free) | 1 cycle |
| broadcast | 1 cycle |
| LIP / TPDIP / CBP on air | 2 cycles |
| TPSIP on air | 3 cycles |
| TP / EOCP on air | 1 cycle |

## Where this design departs from, or adds to, the published scheme

These are choices made here because the description is silent or leaves room:

- **Closing token.** The dispatch phase ends with a broadcast TP(to = 0). The scheme only says the core with order 0 may transmit at once; a marker was needed so that cores know dispatch is over.
- **EOCP access** is arbitrated as described above. The scheme does not say how these packets reach the medium.
- **The CU waits for the EOCPs of the cores that received instructions**, not of all cores.
- **Bundle framing:** a header word with NI, and `NI = 0` as the end of the program. Memory is read one word per request. The 128 Gb/s DRAM bandwidth of the reference system is not modelled, but decode (10 cycles per word) is the bottleneck anyway.
- **Codes:**
  - packet-type codes 0–5;
  - gate codes `E`/`F` for TPS/TPD;
  - at most two operands per general instruction.
- **TPS destination field.** The published instruction figure labels the TPS destination field with the local-address width, while the text says it keeps the absolute address. The text is followed here: `qd` is 11 bits.
- **Buffer depths** are 16, one per qubit. In one bundle a qubit appears in at most one instruction, so no buffer can overflow with a legal program. Overflow is still detected (`qc_error`, assertions) because the broadcast channel has no back-pressure.
- **One operation of each kind at a time per core.** The TPDB may release entries in any order, but corrections leave through one execute port per core, as do local gates and sources. Parallelism inside a core is left to the qubit hardware behind those ports.
- **EPR timing** is not in the RTL. The EPR controller only queues configurations. Generation, distribution and the pre- and post-processing latencies belong to the quantum side. In the test bench they are folded into the latency of the source operation.
- The classical token-passing baseline that the scheme is compared against is not part of this design.

Nothing here reproduces the execution-time study of the scheme itself. The RTL gives the protocol and its cycle costs; the quantum latencies come from whatever drives the `q_*` ports.

## Verification

Each block has a self-checking test bench in `tb/`. Each prints `TB_RESULT checks=<n> failures=<m>`, then finishes, and has a watchdog.

| test bench | what it checks |
|---|---|
| `tb_lib_fifo`, `tb_tpsb`, `tb_tpdb` | random traffic against a queue model; sorted order and stable ties (TPSB); qubit matching and any-order release (TPDB); overflow flags |
| `tb_wireless_interface` | every packet type in loopback, bit-exact, with flit counts and air time per type |
| `tb_winoc_channel` | grant latency, no interleaving, scheduled-first priority, round-robin fairness, collision and conflict flags |
| `tb_dispatcher` | packet contents, token orders restarting per bundle, EPR handshake before each TPS, closing token |
| `tb_epr_ctrl` | the (source, destination) pairs it queues |
| `tb_control_unit` | exact packet spacing (decode + memory latency), no fetch before all involved cores report, EOCPs from uninvolved cores ignored |
| `tb_lcu` | buffering, token wait, CBP then TP(to+1), TPD release on matching bits, EOCP |
| `tb_idmac_system` | end-to-end run, described below |

`tb_idmac_system` runs the top at its default size: 100 cores, 16 qubits each, no parameter overrides.

- It generates a random 30-bundle program with local gates and teleportations between random cores. Every tenth bundle has one core source 12 teleportations.
- It drives the behavioural models `tb/instr_mem_model.sv` (memory) and `tb/qcore_model.sv` (qubit latencies: gate 20 ns, source 1390 ns, correction 30 ns).
- It checks, from the packets heard on the channel:
  - each bundle's instruction packets;
  - the closing token;
  - for every `k`, the k-th CBP (destination and bits) followed by TP(k+1);
  - one EOCP per involved core;
  - the operations executed per core;
  - that no error flag rose.
- It counts each mechanism of the protocol and fails if any never occurred:
  - a TPS waiting for its token;
  - token hand-overs that skip idle cores;
  - EOCPs contending for the medium;
  - dispatch stalled by a full EPR queue;
  - a TPD waiting for its bits.

`tb_idmac_workloads` also runs the full-size top, on circuits of the kind the scheme is evaluated with. It uses quantum latencies scaled by 0.5.

- **Random circuit on 10 cores:** 160 logical qubits and 1,600 gates, half of them two-qubit, with qubit `i` on core `i mod 10`. It compiles to 82 bundles and about 553,000 cycles.
- **GHZ chain on 4 cores × 9 qubits:** 25 qubits, one H and 24 CNOTs. It compiles to 49 bundles.

The test bench's own compiler turns each cross-core gate into a TPS/TPD pair, followed one bundle later by the local gate. The test checks the token sequence of every bundle, each core's operation counts and the error flags. It prints how many cycles each program took and how busy the channel was.

A 100-core random circuit would take about 11 million cycles. The source halves of a bundle's teleportations run strictly one after another in token order, so this size was not simulated.

A typical `tb_idmac_system` run ends with 1528 checks and 0 failures in about 170,000 simulated cycles, a few seconds of simulation after a build of about a minute.

To simulate any test bench with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    -y rtl -y tb rtl/idmac_pkg.sv tb/tb_idmac_system.sv \
    --top-module tb_idmac_system -Mdir obj_dir
obj_dir/Vtb_idmac_system
```

Replace `tb_idmac_system` with any other test bench name. The `-y` options let Verilator find the modules by file name.

## Limits worth knowing

- The scheduled-access guarantee rests on the program. If two TPS instructions in one bundle got the same order, both cores would transmit, and the channel would flag `sched_conflict` and `collision`. The dispatcher itself always assigns unique orders.
- A CBP for a qubit with no pending TPD is dropped and flagged in `qc_error`. A TPD whose bits never arrive keeps its core in execution, and so stalls the CU; there is no timeout.
- The channel model is ideal: no bit errors and a fixed one-cycle hop.
