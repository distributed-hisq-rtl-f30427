# Distributed-HISQ in SystemVerilog

A superconducting quantum processor with tens of qubits needs hundreds of
analog control channels. No single board has that many, so control is spread
over many boards. Each board drives a few dozen channels, and all the boards
must act together down to the clock cycle whenever a two-qubit gate or a
feedback operation spans two of them. This design is a digital controller
for such a system. It has two parts:

* **A small instruction set.** The whole job of a control board is reduced
  to "send codeword *c* to port *p* at time *t*". The instruction set is
  RV32I plus a handful of instructions for waiting, codewords,
  synchronisation and messages. What a codeword *means* (a Gaussian pulse,
  an NCO frequency, the start of a measurement) is decided by the analog
  hardware behind the port, not by the instruction set. The same core
  therefore serves a 28-channel control board and an 8-channel readout board.
* **Booking-based synchronisation.** Boards keep running on their own and
  synchronise only when a program asks for it. A board announces a
  synchronisation point *before* it reaches it ("books" it) and keeps doing
  useful, precisely timed work while the announcement travels. When the
  announcement has had time to arrive, the board pauses only if its partner
  is not ready yet. If every board books early enough, synchronisation costs
  no cycles at all.

The RTL covers:
* the controller core (pipeline, quantum instruction decoder, timing
  control unit, synchronisation unit, message unit, memory);
* the router that coordinates groups of boards;
* a 12-board system top.

Analog front ends, readout signal processing, the LVDS physical layer and
error decoders are not part of it (see [What is not here](#what-is-not-here)).

## Files

| file | contents |
|---|---|
| `rtl/hisq_pkg.sv` | widths, opcodes, event and message types, wrap-safe time comparison |
| `rtl/hisq_mem.sv` | unified program/data memory, instruction port + byte-writable data port |
| `rtl/hisq_pipeline.sv` | RV32I pipeline, hands HISQ instructions on, stalls on back-pressure |
| `rtl/hisq_qdecoder.sv` | decodes `waiti`/`waitr`/`cw.x.x`/`sync` into timing-unit commands |
| `rtl/event_queue.sv` | 38-bit x 1024 first-word-fall-through FIFO |
| `rtl/tcu.sv` | timing control unit: timestamp, per-port codeword queues, sync queue, pausable timer |
| `rtl/syncu.sv` | synchronisation unit: nearby and remote synchronisation |
| `rtl/msgu.sv` | message unit for `send`/`recv` |
| `rtl/hisq_core.sv` | one controller node |
| `rtl/sync_router.sv` | router of the synchronisation tree |
| `rtl/link_delay.sv` | fixed-latency model of a board-to-board wire |
| `rtl/dhisq_system.sv` | top: 3 groups of 1 readout + 3 control boards, 3 leaf routers, 1 root |
| `tb/tb_asm_pkg.sv` | instruction encoders used to write test programs |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the system benches |

## Instruction set as built

The classical part is RV32I, with these exceptions:
* FENCE, ECALL, EBREAK and CSR instructions are not implemented. They set a
  sticky `illegal` flag and execute as no-ops, because interrupts and
  fences would disturb timing.
* Loads and stores use byte addresses into the node's own memory.

The additions use the two RISC-V custom opcodes. Their bit encodings are this
design's own.

| instruction | opcode | funct3 | operands |
|---|---|---|---|
| `waiti imm` | 0001011 | 000 | `imm[31:20]`, unsigned, cycles |
| `waitr rs1` | 0001011 | 001 | register value, cycles |
| `sync tgt` | 0001011 | 010 | `imm[31:20]` low 8 bits: neighbour or router address |
| `send rs1, rs2` | 0001011 | 011 | rs1 = neighbour address, rs2 = data word |
| `recv rd, src` | 0001011 | 100 | `imm[31:20]` = neighbour address |
| `cw.i.i port, cw` | 0101011 | 000 | port `[11:7]`, 14-bit codeword `[28:15]` |
| `cw.i.r port, rs1` | 0101011 | 001 | port `[11:7]`, codeword = rs1 |
| `cw.r.i rs1, cw` | 0101011 | 010 | port = rs1, codeword `[31:20]` |
| `cw.r.r rs1, rs2` | 0101011 | 011 | port = rs1, codeword = rs2 |

Timing of quantum instructions is *relative*:
* Each node keeps a timestamp. `waiti`/`waitr` add to it.
* `cw` and `sync` are stamped with the current timestamp.

A program therefore reads like a timeline:

```
waiti 1
cw.i.i 21, 2     # at t+1, port 21 gets codeword 2
cw.i.i 20, 2     # also at t+1
waitr x1         # advance by x1 cycles
```

## Queue-based timing: decoupling "when issued" from "when executed"

The pipeline does not execute quantum instructions at their time. It only
*schedules* them:
* Each codeword goes into the event queue of its port as {24-bit timestamp,
  14-bit codeword}. The queue is 1024 entries deep.
* Each `sync` goes into a small sync queue.
* A timer starts at the global trigger.
* Each cycle, every queue head whose timestamp the timer has reached is
  issued. `cw_valid[p]` pulses with `cw_data[p]`, or a sync event goes to the
  synchronisation unit.

The pipeline can run ahead of the timer by as many events as the queues hold.
It stalls when the queue it needs is full. This slack is what hides
branches, loops and register arithmetic from the output timing.

Two flags report timing problems; both are sticky and can be read out:
* **late**: an event reaches its queue head after its time has passed,
  because the program fell behind. It is issued at once and the flag is set.
* **bad_port**: a codeword names a port that does not exist. It is dropped
  and the flag is set.

The one extension over the classic queue-based design is the `pause` input:
* While it is high the timer holds and nothing is issued.
* Everything scheduled after a synchronisation point shifts by the pause
  length and keeps its exact relative spacing.

Timing details:
* A command accepted in cycle *c* can be issued from cycle *c+2*.
* The pipeline has two stages. The next fetch address is formed in the same
  cycle as a branch decision, so taken branches cost nothing.
* Loads take two cycles.
* Programs should start with a few cycles of waiting, or `run` should lead
  `trig` by a few cycles, so that the pipeline starts ahead of the timer.

## Booking-based synchronisation

This is the subtle part of the design.

### Nearby synchronisation (two neighbouring boards)

Two neighbours each run `sync <other>`. On each side, when the sync event
leaves the timing unit (the *booking* time *B*):

1. The synchronisation unit sends a one-cycle pulse on the link to the
   neighbour.
2. It loads a counter with *N*, the fixed and calibrated latency of that
   link, and the timer keeps running.
3. When the count completes (*Condition I*) it checks *Condition II*: has the
   neighbour's pulse arrived? A per-link *sync flag*, set by the pulse and
   cleared when consumed, remembers an early pulse. A pulse arriving in that
   very cycle also counts.
4. If the pulse has not arrived, `pause` freezes the timer until it does.

The point that gets aligned is therefore *B + N* on each board, not *B*.
**A program must place at least *N* cycles of work (or waiting) after
`sync`** before the first operation that needs to be aligned. The reference
two-board experiment does exactly this:

```
readout board                    control board
  waiti 2                          addi x2, x0, 120
  sync 1                           addi x1, x0, 0
  waiti 6      # = N for RO->CB    waiti 1
  waiti 57                         cw.i.i 21, 2
  cw.i.i 5, 1                      addi x1, x1, 40
  jal x0, -20                      cw.i.i 20, 2
                                   waitr x1          # 40, 80, 120: non-deterministic
                                   sync 0
                                   waiti 8           # = N for CB->RO
                                   cw.i.i 7, 1
                                   waiti 50
                                   bne x1, x2, ...
```

Why this aligns both boards:
* Say board A books at *B_A* and board B later at *B_B*.
* A's pulse reaches B before B's own count ends, so B never pauses. This is
  the zero-overhead case.
* A pauses from *B_A + N* until B's pulse arrives at *B_B + N*.
* Both then continue from the same instant, cycle-exact.

If both book at the same time, neither pauses.

In the reference hardware the extra `waiti 57` on the readout board made up
for different analog trigger delays. This model has no such delays, so in
simulation the readout codeword appears exactly 57 cycles after the control
board's.

Per-link latencies and neighbour addresses (`nb_lat`, `nb_id`) are
configuration inputs of the core. The system top ties them to the link
latencies it instantiates.

### Remote (region-level) synchronisation through routers

`sync <router address>` synchronises every board below that router:

1. At booking, the node sends *T = abs_time + L* up the tree. `abs_time` is
   an absolute timer that starts at the trigger and is never paused. *L* is
   a per-ancestor configured latency.
2. The addressed router collects one time-point from each child, takes the
   latest, *T_m*, and broadcasts it back down.
3. Each node stores *T_m* in its *abs-timer buffer*.
4. When its own count of *L* completes (Condition I), a node pauses if
   `abs_time` has not yet reached *T_m*. It resumes exactly at *T_m*.

Every node thus restarts at the same absolute instant. A node whose *T* was
the latest does not pause at all. *L* is chosen as the round trip to the
router through wires and router registers:
* leaf router: *2 x LAT_TREE + 3* (= 11 by default);
* root router: *2 x LAT_TREE + 2 x LAT_RR + 6* (= 22 by default).

With this value the maximum always arrives in time for the latest node.
As with nearby sync, the program should follow `sync` with *L* cycles of
work or waiting.

Time-points are compared wrap-safely, by signed difference, so the 32-bit
absolute timer may wrap.

Only one synchronisation may be outstanding per node. A second sync event
while one is pending sets the unit's sticky error flag.

## The router

`sync_router` has one buffer slot per child and follows three rules:
* A message from the parent is broadcast to all children one cycle later.
* A message from a child is buffered.
* Once every participating child has delivered (`child_mask`; all children
  in the top), the router takes the wrap-safe maximum. If the messages are
  addressed to this router, it broadcasts the result. Otherwise it forwards
  the result, still addressed to the same router, to its own parent.

Outputs are registered, with two cycles from the last child's arrival to the
output. The sticky `err` flag is set in two cases:
* a child sends twice before its group completes;
* a parent broadcast collides with one of the router's own broadcasts.

## Messages

The architecture leaves the message unit open, so this one is deliberately minimal:
* `send rs1, rs2` puts the 32-bit word on the link whose neighbour address
  equals rs1, in the same cycle.
* Each link has a 4-word receive FIFO. `recv rd, src` takes the oldest word
  from the FIFO of link `src`, and the pipeline stalls while that FIFO is
  empty.
* A send to an unknown neighbour sets the unit's error flag, as does an
  overflowing FIFO.

Measurement results use the same unit. The block diagram of a node shows
results coming back from the analog side, but says nothing about how a
program reads them. Here each core has a `res_valid`/`res_data` input. A
result word goes into one more 4-word FIFO, and the program reads it with
`recv rd, <own address>`, so it also stalls until the result is there. At
the top level these inputs are `node_res_valid[n]`/`node_res_data[n]`, one
per board. The meaning of the word is left to the program; the system
bench delivers a single 0/1 bit. A typical feedback sequence looks like this:

```
readout board:  recv x5, <own id>     # wait for the discriminated result
                send x10, x5          # x10 = control board's address
control board:  recv x6, <readout id>
                beq  x6, x0, skip     # branch on the result
                cw.i.i 2, 77          # conditional pulse
```

A `recv` that stalls also delays the instructions queued after it. The
wait that follows it has to be long enough to put the timeline back ahead
of real time before the next codeword or `sync`, or that event is late.

## The 12-board system

`dhisq_system` instantiates the configuration that a 66-qubit device calls
for:
* 66 XY lines / 8 = 9 control boards, whose 180 Z channels cover the 176
  needed;
* 11 readout lines / 4 per board = 3 readout boards.

These are grouped into three regions of one readout and three control boards.

* **Node numbering.** Node *n = 4g + p*. *p = 0* is the readout board of
  group *g* and has 8 ports; *p = 1..3* are control boards with 28 ports
  (8 XY + 20 Z). The node's address is *n*.
* **Router addresses.** Leaf router *g* has address 0x81+g; the root is
  0x80. Addresses 0x80 and above are routers.
* **Neighbour links.** Each has a sync wire and a 32-bit message wire in each
  direction.
  * The readout board of a group links to each of its control boards
    (link *k* goes to control board *k+1*).
  * Control boards link to their readout board (link 0), the next control
    board (link 1) and the previous one (link 2).
  * Unused links carry address 0x7F.
* **Latencies (parameters).**

| parameter | default | meaning |
|---|---|---|
| `LAT_CB2RO` | 8 | control board to readout board |
| `LAT_RO2CB` | 6 | readout board to control board |
| `LAT_CB2CB` | 4 | between control boards (assumed) |
| `LAT_TREE` | 4 | node to leaf router (assumed) |
| `LAT_RR` | 4 | leaf router to root (assumed) |

  The first two are the waits after `sync` in the two-board experiment.
* **Ports.**
  * `run`: start all pipelines.
  * `trig`: start all timers.
  * A programming bus (`prog_we`, `prog_node`, `prog_addr`, `prog_data`),
    used while `run` is low.
  * Codeword outputs per board.
  * Per node: PC, error flags `{msg, sync, late|bad_port, illegal}` and pause.
  * Per router: error flag.

Synthesised with yosys at full size the top is about 14.4 k word-level cells
and 18 k flip-flop bits. It also has 23.3 Mbit of memories:
* 12 x 1 Mbit program memories;
* 276 x 38 kbit codeword queues (9 x 28 + 3 x 8 ports);
* small register files, sync queues and message FIFOs.

One core with 28 ports needs about 1.3 k cells and 1.1 k flip-flop bits.

## Simulating

Every testbench is self-checking and prints
`TB_RESULT checks=N failures=M`. With plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/hisq_pkg.sv tb/tb_asm_pkg.sv $(ls rtl/*.sv | grep -v hisq_pkg) \
    tb/tb_dhisq_system.sv --top-module tb_dhisq_system -Mdir obj
./obj/Vtb_dhisq_system
```

| testbench | what it shows |
|---|---|
| `tb_event_queue` | random push/pop against a model, including full and bypass cases |
| `tb_hisq_mem` | both ports, byte enables, read-first behaviour |
| `tb_hisq_qdecoder` | all operand forms against an independent decode |
| `tb_hisq_pipeline` | an RV32I program (loops, loads/stores of all widths, jumps), the stream of quantum instructions and their operands, send/recv against an echoing model |
| `tb_tcu` | exact issue cycles, pause, full-queue back-pressure, late and bad-port flags |
| `tb_syncu` | random nearby trials (every early/late/same-cycle order) and remote trials with a model router, cycle-exact release |
| `tb_msgu` | two units back to back: every word arrives once, in order, on its sender's link; a send to an unknown address is flagged; result words come out through `recv` from the unit's own address, and a results overflow is flagged |
| `tb_sync_router` | random groups: maximum, forwarding to the parent, broadcast, latency, masked child, wrap-around |
| `tb_link_delay` | latency and data integrity |
| `tb_hisq_core` | two cores joined by a link: 40 random trials of nearby sync with codewords aligned to the cycle, the late core never paused, pause length equal to the skew, a message carried into a register codeword |
| `tb_dhisq_system` | all 12 nodes at reduced memory/queue depth; see below |
| `tb_long_range_cnot` | the long-range CNOT dynamic circuit on one group, 12 random trials; see below |
| `tb_dhisq_full` | the same at full default size (32768-word memories, 1024-entry queues) |

The system benches load one program into each node:
* **Nodes 0 and 1** run the two-board experiment: 6 synchronisations,
  checked to the cycle. The readout board must pause; the control board
  never may.
* **Nodes 2 and 3** exchange a message and echo it back, which includes a
  `recv` stall.
* **Nodes 4-7** synchronise through their leaf router after random
  different waits. The last arrival must not pause; all others must.
* **Nodes 8 and 9** close a feedback loop. The bench hands readout node 8
  a random result bit. Node 8 reads it from its own address and forwards
  it. Control node 9 branches on it and must emit codeword 77 for a 1 and
  66 for a 0.
* **Node 10** floods a codeword queue until the pipeline stalls, and then
  checks every codeword and its 20-cycle spacing.
* **All 12 nodes** end with a root synchronisation and a marker codeword,
  which must appear in the same cycle everywhere.
* **Node 11** then deliberately falls behind. Its late codeword must still
  appear and must raise only its late flag.

Each of these mechanisms is counted, and one that never happened is a
failure.

### A dynamic circuit: the long-range CNOT

`tb_long_range_cnot` runs, as four HISQ programs, the controller side of the
standard constant-depth long-range CNOT. Two data qubits ψ1 and ψ2 are
joined through a chain of five ancillas A1..A5. CNOT and H layers entangle
the chain, and then the ancillas are measured. ψ2 gets an X if A2⊕A4 = 1,
and ψ1 gets a Z if A1⊕A3⊕A5 = 1. The qubits sit on the three control boards
of group 0: ψ1/A1/A2, A3/A4 and A5/ψ2. Two of the CNOTs therefore cross a
board boundary. Codewords stand for gates (1 H, 2 CNOT control, 3 CNOT
target, 4 X, 5 Z, 6 measure). The timing is 5, 10 and 75 cycles for one-qubit
gates, two-qubit gates and measurement, which is 20, 40 and 300 ns at
4 ns per cycle.

The four boards reach their region `sync` after different random amounts
of work. From then on their timelines agree, and both halves of every
cross-board CNOT fire in the same cycle. The bench plays the
discriminator: 75 cycles after the last measurement codeword, it hands the
readout board a 5-bit result word. The readout program computes both
parities and sends each to the board that needs it. The corrections are
booked at a fixed feedback point, 60 cycles after the results are due.
They fire at exactly that cycle whenever the parity is 1. In the model,
both parities reach their control boards 21 cycles (84 ns) after the
result word. That covers `recv`, ten ALU instructions, two sends and the
6-cycle link. The budget is thus comfortably met, and no board is ever late.

## Departures and choices worth knowing

These points are not fixed by the architecture description; they were
decided here:
* **Instruction encodings and field widths.** The timestamp is 24 bits and
  the codeword 14 bits, chosen to fill the 38-bit queue entry. Ports are 5
  bits and addresses 8 bits.
* **Program memory size.** 32768 words, estimated from the block-RAM budget
  of a control board.
* **Pipeline structure.** Two stages, with the stall rules above. The
  original pipeline depth is not known.
* **Message unit.** Entirely this design's own.
* **Results into the program.** Results are read with `recv` from the
  node's own address. The architecture shows results flowing back into a
  node but not how a program reads them.
* **Topology and link latencies.** The grouping of boards, the chain between
  control boards and the tree latencies are assumptions. Only the
  readout-to-control-board links and their 6/8-cycle latencies come from
  the reference setup.
* **One outstanding sync per node.** No queueing of concurrent sync groups.
* **Routers wait for all children.** A sync to a router involves every node
  below it. Subgroups would need per-request masks, which are not built.
* **Wire model.** `link_delay` is a register pipeline standing in for the
  LVDS back-plane channels. It is not a PHY.

## What is not here

* DACs, ADCs, NCOs and the pulse generation behind the ports. Codewords
  leave the design as `cw_valid`/`cw_data`.
* Readout demodulation and state discrimination. The discriminated result
  is taken as an input word (`node_res_*`) and not computed from signals.
* Clock and trigger distribution. These are the shared `clk`/`trig` inputs.
* The LVDS physical layer.
* The per-router QEC decoders that the architecture's evaluation assumes.
* The full benchmark programs of the evaluation: compiled dynamic circuits
  and logical-T gates. Of these, only the long-range CNOT that the dynamic
  circuits are built from is run, alongside the two-board experiment.
