# A superscalar quantum network processing unit (QNPU)

In a distributed quantum computer, several small quantum processors work
together on one program. Some two-qubit gates then act on qubits that sit in
different nodes. These *remote* gates are carried out with prepared entangled
pairs (EPR pairs) and a few classical messages, using one of two protocols:

- **teleportation** (TP-Comm) moves a qubit's state to the other node;
- **cat-entangle / cat-disentangle** (Cat-Comm) make a temporary shared copy
  of a control qubit and later undo it.

The design here splits each node in two. The quantum processor (QPU) keeps
its local computation. A separate *quantum network processing unit* (QNPU)
runs the communication protocols on its own qubits in a communication zone.
The QPU sends the QNPU one high-level instruction per remote transfer. The
QNPU expands that instruction into micro-operations (uops) that:

- reserve and look up EPR pairs;
- exchange messages with the peer QNPU;
- apply the local gates and measurements;
- tell the QPU when a transferred qubit has arrived.

Remote operations of a distributed circuit are often independent of each
other. The QNPU is therefore *superscalar*: it has `WAYS` identical lanes,
four by default, and each lane runs one protocol instruction at a time. The
lanes share the node's EPR resource table and its network buffers. With
`WAYS = 1` you get the scalar QNPU.

This repository gives synthesizable SystemVerilog for the QNPU's classical
controller, and self-checking testbenches that model everything around it.

The following are outside the RTL:

- the QPU;
- the analog qubit control and readout electronics;
- the qubits themselves;
- the physical links;
- the scheduler that prefetches EPR pairs.

Each of these is a port, or a set of ports, on `qnpu_top`.

## The six protocol instructions

An instruction (`instr_t`) carries these fields:

- `op`: 3 bits;
- `qubit`: the data qubit, or the QPU register it refers to;
- `node`: the peer node;
- `tid`: a transfer ID that both nodes use for the same transfer.

The two ends of every transfer run complementary instructions:

| sender side | receiver side | effect |
|---|---|---|
| `SEND_TP_QUBIT q, B` | `GET_TP_QUBIT q'` | state of `q` teleported into B's EPR qubit, then handed to B's QPU as `q'` |
| `SEND_CAT_ENT_QUBIT c, B` | `GET_CAT_ENT_QUBIT r` | B's EPR qubit becomes an entangled copy of control `c` |
| `SEND_CAT_DISENT_QUBIT e, A` | `GET_CAT_DISENT_QUBIT c` | the copy `e` is measured away, A corrects `c` |

Inside a lane the uops work on eight 8-bit registers:

| # | name | use |
|---|---|---|
| 0 | EPRIdReg | pair ID |
| 1 | StatusReg | result of the ACK or of the synchronisation |
| 2 | EPRQubReg | local qubit of the pair |
| 3 | CommQubReg | loaded with the instruction's `qubit` when the instruction starts |
| 4 | BitXReg | X correction bit |
| 5 | BitZReg | Z correction bit |
| 6 | peer | sender's node ID, kept for the ACK |
| 7 | spare | unused |

`uop_decoder` reads the uop sequences from a small microcode function in
`qnpu_pkg`:

```
SEND_TP_QUBIT            GET_TP_QUBIT
 EPR_RESERVE  R0, B        RECV_EPR_ID     R0, R6(sender)
 SEND_EPR_ID  B, tid, R0   EPR_RESERVE_SYNC R1, R0, R6
 ACK_WAIT     tid -> R1    ACK_SEND        R1 -> R6
 GET_EPR_QUBIT R2 <- R0    GET_EPR_QUBIT   R2 <- R0
 CNOT R3, R2               TP_RECV_BITS    -> R4(X), R5(Z)
 H    R3                   X R2  if R4
 MEAS R2 -> R4             Z R2  if R5
 MEAS R3 -> R5             TRANSFER_SUCCESS_NOTIFY R2, R3
 EPR_RELEASE R2            EPR_RELEASE R2
 TP_SEND_BITS B, R5, R4
```

The teleport pair above is exactly the published uop listing. The four
Cat-Comm sequences are this design's own reading of the protocol:

- `SEND_CAT_ENT`: reserve, send ID, wait for the ACK, get qubit, CNOT c→EPR,
  MEAS EPR, release, send the bit.
- `GET_CAT_ENT`: receive ID, sync, ACK, get qubit, receive the bit, X if 1,
  notify. The EPR qubit is not released, because it now holds the copy.
- `SEND_CAT_DISENT`: H, MEAS, release the copy's qubit, send the bit.
- `GET_CAT_DISENT`: receive the bit, Z on the control if 1, notify.

## How a lane runs an instruction

This is the core of the design (`qnpu_lane`). The lane is a small in-order
machine with three execution units of different speeds:

- the **EPR unit** answers in the same cycle, unless it must wait for a pair;
- the **classical comm unit** may poll the receive buffer for hundreds of
  cycles;
- the **quantum unit** waits for the qubit interface.

The lane runs as follows:

1. **Decode.** When the decoder accepts an instruction it clears the lane's
   registers and loads CommQubReg. It then writes one uop per cycle into the
   16-entry uop buffer.
2. **Dispatch.** The head of the uop buffer is dispatched when two conditions
   hold:
   - its unit is idle;
   - none of the registers it reads or writes is *pending*.

   A dispatched uop marks its destination registers pending. They become
   ready again in the cycle the unit reports completion. This is a
   scoreboard on the per-register ready bits, and it gives the only ordering
   between units. So the `SEND_EPR_ID` of one transfer can be in flight while
   the EPR unit already handles the next EPR uop, but a gate never runs
   before the `GET_EPR_QUBIT` that names its qubit.
3. **Guarding the qubit.** Register dependences alone are not enough in two
   places. The lane adds these rules:
   - Quantum uops and the notify also mark the *qubit register they act on*
     as pending. Without this, an `EPR_RELEASE` (which only reads that
     register) could free the pair while the last gate or measurement on it
     is still running.
   - `GET_EPR_QUBIT` also reads StatusReg. Without this, it could overtake
     `ACK_WAIT` on the sender, and the CNOT would entangle the data qubit
     before the peer confirmed the pair.
4. **Retire.** The decoder keeps an instruction atomic. It waits until the
   uop buffer is empty and all three units are idle, then pulses `retire` and
   takes the next instruction. A lane therefore never mixes two instructions.

Conditional X/Z uops test bit 0 of their condition register. If the bit is
0, the quantum unit sends nothing and completes in one cycle (`skipped`).
Measurements write the returned bit into their result register.

## Sharing between lanes

**Router.** `instr_router` hands out instructions from the 16-entry
instruction buffer one per cycle, in order, to the lowest-numbered idle lane.
When all lanes are busy the head waits (`perf.dispatch_stalls`). The lanes do
not check dependences between instructions. The QPU sends only instructions
that may run concurrently.

**EPR resource table.** `epr_unit` holds one table per node, shared by all
lanes. Each entry has these fields:

- pair ID;
- remote node;
- state: Empty, Available or Occupied;
- local qubit index;
- a `source` flag.

All lanes may present an EPR request in the same cycle. They are served in
lane order against a running copy of the table, so two lanes never get the
same pair. Each operation works as follows:

- `EPR_RESERVE` takes the first Available *source-side* entry for the
  requested node and makes it Occupied. If there is none, it waits.
- `EPR_RESERVE_SYNC` is the receiver's side of the handshake. It looks up the
  pair ID it received. If the entry is Available, destination-side and
  belongs to the sender, the entry becomes Occupied and the status is 1.
  Otherwise the status is 0. If the pair has not arrived in the local table
  yet, it waits. The prefetcher may fill the two ends of a link at different
  times.
- `GET_EPR_QUBIT` returns the qubit of the Occupied entry.
- `EPR_RELEASE` empties the entry that holds a given qubit.

The `source` flag is needed because both nodes get an entry for every
prefetched pair. Without the flag, both ends could reserve the same pair for
two different transfers.

**Network buffers.** These connect a node to the classical link:

- `net_send_buffer` is an 8-deep FIFO. A round-robin arbiter lets one lane's
  message in per cycle.
- `net_recv_buffer` is an 8-slot associative store, not a queue. Messages
  may arrive long before the uop that wants them, and lanes consume them in
  any order. A receive uop looks up a (message type, transfer ID) pair each
  cycle until it finds its message, which is then removed. A lookup that
  finds nothing shows as `polling`.

## Classical messages

A message (`msg_t`) has these fields:

- type: `MSG_EPR_ID`, `MSG_ACK` or `MSG_BITS`;
- source node and destination node (5 bits each);
- transfer ID (8 bits);
- 8-bit payload.

The payload holds:

- for `MSG_EPR_ID`, the pair ID;
- for `MSG_ACK`, the synchronisation status;
- for `MSG_BITS`, the Z bit in bit 1 and the X bit in bit 0.

The ACK goes back to the node the EPR ID came from.

## Top-level interface (`qnpu_top`)

All signals are synchronous to `clk`. `rst_n` is an asynchronous, active-low
reset. Every stream uses valid/ready: a transfer happens in a cycle where
both are high.

| port | dir | meaning |
|---|---|---|
| `my_node[4:0]` | in | this node's ID |
| `instr_valid/ready`, `instr` | in/out/in | protocol instructions from the QPU |
| `nt_valid/ready[WAYS]`, `nt[WAYS]` | out/in/out | transfer-success notify `{tid, qubit, qpu_reg}`, one port per lane |
| `pf_valid/ready`, `pf_pair_id`, `pf_remote`, `pf_qubit`, `pf_source` | in/out/in | EPR prefetch appends a pair to the table |
| `tx_valid/ready`, `tx_msg` | out/in/out | messages to the classical link |
| `rx_valid/ready`, `rx_msg` | in/out/in | messages from the classical link |
| `cw_valid/ready[WAYS]`, `cw[WAYS]` | out/in/out | codeword `{gate, q0, q1}` to the qubit control interface, per lane |
| `q_done[WAYS]`, `q_meas[WAYS]` | in | completion pulse of the lane's gate, with the measured bit |
| `retire[WAYS]` | out | a lane finished an instruction |
| `perf` | out | 32-bit counters, listed below |

The counters in `perf` are:

- retired instructions;
- dispatch stalls;
- register-hazard stalls;
- polling cycles;
- skipped corrections;
- EPR waits;
- failed synchronisations;
- cycles with two or more lanes busy.

Timing of the main paths:

- An instruction pushed into the instruction buffer can be taken by an idle
  lane in the next cycle.
- The decoder emits one uop per cycle.
- A uop can dispatch one cycle after it enters the uop buffer.
- EPR uops complete in their dispatch-plus-one cycle when the table can
  serve them.
- A send completes when the send buffer accepts the message.
- A receive completes in the cycle its lookup hits.
- A message accepted by the send buffer can leave the next cycle.

## Parameters

| parameter | default | where it comes from |
|---|---|---|
| `WAYS` | 4 | the main configuration is a 4-way superscalar QNPU |
| `IBUF_DEPTH` | 16 | own choice |
| `UOP_DEPTH` | 16 | own choice; the longest sequence has 10 uops |
| `EPR_ENTRIES` | 16 | own choice |
| `TX_DEPTH` | 8 | own choice; must be a power of two |
| `RX_SLOTS` | 8 | own choice |

The widths are in `qnpu_pkg`, and all of them are this design's choice:

- node ID: 5 bits, which covers the largest studied system of 30 nodes;
- transfer ID: 8 bits;
- qubit index: 8 bits;
- pair ID: 8 bits;
- register: 8 bits.

At the defaults, `qnpu_top` synthesises to about 4,700 word-level cells,
1,600 flip-flop bits and 4,000 memory bits. Most of the logic is the shared
EPR table, whose four lane ports are searched in one cycle.

## Departures from the published description, and open points

- **Cat-Comm sequences.** Only the teleport uop sequences are published. The
  four Cat-Comm sequences are reconstructed from the protocol circuit.
- **One EPR table per node.** The superscalar block diagram draws an EPR
  unit inside every lane, while the text keeps one EPR table per node. Here
  each lane has its own EPR front end, and the lanes share one table.
- **Source flag.** The table entry has a `source` flag that the published
  table does not have. It is needed to keep the two ends from reserving the
  same pair.
- **Failed synchronisation.** A failed `EPR_RESERVE_SYNC` is reported in
  StatusReg, in the ACK and in `perf.sync_fails`. What should happen next is
  not described, and this design does not abort the instruction. The
  following `GET_EPR_QUBIT` finds no Occupied pair and returns qubit index 0
  with `ok = 0`, and the remaining uops still run. On the sender, a 0 status
  from `ACK_WAIT` is only recorded. Recovery is left to the system around
  the QNPU. The end-to-end testbench runs only successful transfers. The
  failure path is covered by the unit testbenches of the EPR unit and the
  lane.
- **Waiting instead of failing.** `EPR_RESERVE` waits when no pair is
  available instead of failing. This matches an assumed perfect prefetcher.
- **Per-lane QPU ports.** Each lane has its own codeword and notify port. How
  several lanes share the qubit control and readout interface and the QPU
  link is not described.
- **Encodings.** Message formats, bit positions, encodings and all
  handshakes are this design's own.
- **No cycle-count reproduction.** The published execution-cycle results come
  from a cycle-level simulator with gate latencies that are not given. This
  RTL makes no attempt to reproduce those cycle counts.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_instr_buffer` | FIFO order, full/empty, simultaneous push/pop against a queue model |
| `tb_instr_router` | lowest idle lane, stall, all idle patterns |
| `tb_uop_decoder` | every uop of all six sequences, one uop per cycle, retire only when drained |
| `tb_uop_buffer` | in-order dispatch, unit busy and register hazards against a scoreboard model |
| `tb_qnpu_regfile` | writes, pending set/clear, init against a model |
| `tb_epr_unit` | directed protocol cases plus random multi-lane traffic against a table model |
| `tb_quantum_eu` | codewords, skipped conditionals, measurement write-back, handshakes |
| `tb_comm_eu` | every message field, polling, register writes, notify |
| `tb_net_send_buffer` | order, per-lane order, round-robin fairness |
| `tb_net_recv_buffer` | associative lookup, same-cycle multi-lane takes, occupancy, against a model |
| `tb_qnpu_lane` | 60 instructions of all kinds against a protocol model of the EPR unit, the peer and the QPU, including ordering rules |
| `tb_qnpu_top` | two 4-way QNPUs at default parameters wired back to back |
| `tb_qnpu_workload` | the benchmark circuits at full size on 2 to 10 nodes, with 1-lane and with 4-lane QNPUs (below) |
| `tb_qnpu_width` | QFT, VQE-full and QAOA with 30 to 90 qubits on 5 nodes, with 2, 4, 8 and 16 lanes (below) |

`tb_qnpu_top` runs 24 teleports in both directions and 6 cat-entangle /
cat-disentangle pairs. It checks the quantum meaning of each transfer:

- the receiver applies X exactly when the sender's EPR-qubit measurement was
  1;
- the receiver applies Z exactly when the data-qubit measurement was 1;
- both ends use the same pair;
- every notify arrives once;
- no pair is left Occupied.

It also counts each mechanism and fails if one never happened:

- parallel lanes;
- dispatch stalls;
- hazard stalls;
- polling;
- skipped and applied corrections;
- reservation waits;
- late-sync waits.

### Benchmark workloads

`tb_qnpu_workload` runs all 35 benchmark workloads of the evaluation at their
full sizes:

- seven circuits: Hamiltonian simulation, GHZ, BV, QFT, VQE with linear and
  with full entanglement, and QAOA;
- 50, 100 and 150 qubits on 5 nodes, and 150 qubits on 2 and on 10 nodes.

Each workload runs twice: on a system of 1-lane QNPUs and on a system of
4-way QNPUs (`tb/qnpu_workload_sys.sv`, up to 10 `qnpu_top` instances).
Only the remote CNOTs are run, each as a Cat-Comm exchange of four
instructions. A QPU model starts a remote CNOT once no earlier unfinished one
conflicts with it. A perfect prefetcher supplies the pairs.

The testbench checks three things per workload:

- Both systems finish cleanly: every instruction is retired, no
  synchronisation fails, and no pair is left Occupied.
- The remote CNOT count equals the published count. The one exception is
  QFT, where this decomposition gives 0.7 to 1.3 % fewer.
- Circuits with independent remote CNOTs run at least 1.8 times faster on 4
  lanes.

Typical results:

| workload | remote CNOTs | 1 lane (cycles) | 4 lanes (cycles) | speed-up |
|---|---|---|---|---|
| BV-150-5 | 120 | 6511 | 1722 | 3.8 |
| QFT-150-5 | 9000 | 490275 | 127343 | 3.9 |
| VQE-full-150-5 | 9000 | 486082 | 129423 | 3.8 |
| QAOA-150-5 | 18000 | 981099 | 253942 | 3.9 |
| GHZ-150-5 | 4 | 253 | 256 | 1.0 |
| HS-150-10 | 18 | 1158 | 1196 | 1.0 |

The pattern matches the published claim. Workloads with many independent
remote operations gain close to the lane count. Chain-shaped circuits, whose
remote operations are serial, gain nothing.

The absolute cycle counts differ from the published ones. For the parallel
workloads they are two to five times higher. For the serial ones they are
lower, because local gates take no time here. Gate latencies here are random
(1 to 4 cycles). The QPU model hands over at most one instruction per node
every second cycle. The published simulator's latencies are not given, so
this RTL does not try to match its numbers.

### Superscalar width

`tb_qnpu_width` runs QFT, VQE-full and QAOA with 30, 60 and 90 qubits on 5
nodes, on QNPUs with 2, 4, 8 and 16 lanes. It checks that every run finishes
cleanly and that 4 lanes are at least 1.5 times faster than 2. It also checks
that adding lanes never costs more than 5 %.

| workload | 2 lanes | 4 lanes | 8 lanes | 16 lanes |
|---|---|---|---|---|
| QFT-30-5 | 9439 | 4637 | 2472 | 2250 |
| QFT-90-5 | 89072 | 45193 | 23723 | 21277 |
| VQE-full-90-5 | 87010 | 43032 | 23173 | 21315 |
| QAOA-90-5 | 173009 | 86563 | 46867 | 43047 |

Up to 8 lanes the run time halves with each doubling. Beyond 8 lanes the
gain is limited by the test system, not by the lanes. It keeps at most 10
remote CNOTs per node in flight, so that the 16-entry EPR table and the 16
communication qubits never run out. The published study also sweeps the node
count up to 30 nodes; that part is not simulated here.

The EPR prefetcher, the QPU and the qubit interface (`tb/qubit_iface_model.sv`)
are behavioural models with random latencies and random measurement results.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert --top-module tb_qnpu_top \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/qnpu_pkg.sv tb/tb_qnpu_top.sv -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Replace `tb_qnpu_top` with any other testbench name. Assertions in the RTL
check these rules:

- one-hot dispatch;
- no push into a full FIFO;
- no pop from an empty FIFO;
- at most one grant per cycle.
