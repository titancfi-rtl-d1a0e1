# TitanCFI hardware: streaming control-flow events from a RISC-V core to its root of trust

Control-flow integrity (CFI) checks that a program only jumps where it is
supposed to: a function returns to the instruction after its call, an
indirect jump lands on an allowed target. TitanCFI, proposed by Parisi et al.
("TitanCFI: Toward Enforcing Control-Flow Integrity in the Root-of-Trust"),
does not put the checking policy into custom hardware. It streams every
relevant control-flow instruction retired by the host core (a CVA6, RV64GC) to
the root of trust (RoT) already on the chip (OpenTitan, with an Ibex core).
The RoT firmware applies the policy, for example a shadow stack kept in the
RoT's private memory, and answers with a verdict. The host only needs three
small additions:

1. a **CFI stage** in the commit stage of the core. It picks out calls,
   returns and indirect jumps, queues a 224-bit record of each, and holds the
   core back when the queue cannot take more;
2. a **log writer** that ships each record over the SoC's AXI interconnect
   and waits for the verdict;
3. a **CFI mailbox**: a small register file the RoT can read. It has a
   doorbell that interrupts the RoT and a completion flag wired back to the
   core.

This repository gives synthesizable SystemVerilog for these three parts, plus
the interconnect path between them. It also has testbenches that model the
core's commit ports and the RoT firmware.

## How one control-flow instruction travels

```
 CVA6 commit ports 0/1
   │ scoreboard entries           ┌────────────────────── cfi_stage ───────────────────────┐
   ├──► cfi_filter ×2 ─ hit, log ─┤► cfi_log_mux ─ log_in ─► cfi_queue ─ log out ─► cfi_log_writer ─┐
   │                              │      ▲ select           ▲ push  │ full, empty ▲ pop        │ AXI master 0
   │◄── wait ─── cfi_queue_ctrl ◄─┤── retire ── cfi_commit_valid ◄── ack0/ack1                │
   │                              └────────────────────────────────────────────────────────────┘
   │                                                                                           ▼
   │    RoT (Ibex + firmware) ── AXI master 1 (through TileLink-to-AXI) ──► cfi_axi_mux ──► cfi_mailbox
   │          ▲ doorbell interrupt ◄──────────────────────────────────────────────────────────┤
   └── fault ◄─ cfi_log_writer ◄── completion ◄───────────────────────────────────────────────┘
```

1. **Filter** (`cfi_filter`, one per commit port, combinational). It looks at
   the scoreboard entry a commit port is about to retire. It reports a hit for
   every `JALR` (indirect jump, indirect call, return) and for every `JAL`
   that writes a link register (`x1` or `x5`, a direct call). Entries that
   carry an exception are ignored. The filter also builds the commit log.
2. **Inhibit** (`cfi_queue_ctrl`, combinational). It computes the two wait
   bits from the hits and the queue's full flag, before the commit stage
   decides anything (see the next section).
3. **Retire and push** (`cfi_commit_valid`, the block drawn as "V"). This
   block ANDs each hit with that port's commit acknowledge. The log of the
   instruction that really retires is selected (`cfi_log_mux`, the "L" and
   multiplexer path) and pushed into `cfi_queue` at the same clock edge.
4. **Ship** (`cfi_log_writer`). When the queue is not empty, the writer pops
   the head log. It writes the log as four 64-bit AXI writes to mailbox
   registers DATA0–DATA3, then writes 1 to DOORBELL. The mailbox raises the
   RoT's interrupt.
5. **Check** (RoT firmware, not part of this RTL). The firmware reads
   DATA0–DATA3 and clears DOORBELL. It runs its policy, writes the verdict to
   DATA0 bit 0 (1 means violation), then writes 1 to COMPLETION.
6. **Verdict**. COMPLETION is a wire into the log writer, not an interrupt.
   The writer then reads DATA0. If bit 0 is set, it pulses `fault_o` for one
   cycle, with the log of the offending instruction on `fault_log_o`. The
   writer then goes back to step 4 for the next queued log.

The core therefore never waits for a verdict. It only stalls when the queue
is full, so checking runs in the background of execution. A violation is
reported after the fact, some time after the instruction retired.

## Holding back the commit stage

This is the one place where the CFI stage changes the core's timing.
Everything else runs in the background.

The queue takes one log per cycle, but CVA6 can retire two instructions per
cycle. The rules, evaluated every cycle on the entries the ports offer:

| condition | `wait[0]` | `wait[1]` |
|---|---|---|
| port 0 offers a CF instruction and the queue is full | 1 | – |
| port 1 offers a CF instruction and the queue is full | – | 1 |
| both ports offer CF instructions (queue not full) | 0 | 1 |
| otherwise | 0 | 0 |

The inhibit is per port. When two CF instructions arrive together, the first
retires and is queued. The second stays at the head of the scoreboard and is
offered again next cycle, now on port 0. A port with a non-CF instruction is
never held.

Contract with the commit stage, checked by assertions in `cfi_stage`:

* `wait_o` depends only on the offered entries and on registered queue state.
  The commit stage computes its acknowledges after it, so there is no
  combinational loop.
* `commit_ack_i[i]` must be 0 when `wait_o[i]` is 1.
* Port 1 may only retire together with port 0, as in CVA6's in-order commit.

A push into a full queue is refused even if the writer pops in the same
cycle. This costs at most one cycle per full-queue event and keeps `full` a
registered signal.

## The commit log (224 bits)

| bits | field | content |
|---|---|---|
| 63:0 | `pc` | address of the instruction |
| 95:64 | `instr` | uncompressed 32-bit encoding |
| 159:96 | `next` | fall-through address: `pc + 2` if the instruction was compressed, else `pc + 4` |
| 223:160 | `target` | address actually jumped to |

For a call, `next` is the return address a shadow stack must push. For a
return, `target` is the address it must match. The log is sent in 64-bit
chunks, chunk *k* being bits `64k+63:64k`. DATA3 therefore holds
`target[63:32]` in its low half and zeros above.

## Mailbox registers and protocol

All registers are 64 bits wide. Offsets are from `MBOX_BASE`.

| offset | name | host (log writer) | RoT firmware |
|---|---|---|---|
| 0x00 | DATA0 | writes log bits 63:0; reads verdict | reads log; writes verdict in bit 0 |
| 0x08 | DATA1 | writes log bits 127:64 | reads |
| 0x10 | DATA2 | writes log bits 191:128 | reads |
| 0x18 | DATA3 | writes log bits 223:192 | reads |
| 0x20 | DOORBELL | writes 1 (also clears COMPLETION) | writes 0 after taking the request |
| 0x28 | COMPLETION | – (wired to the log writer) | writes 1 when the verdict is in DATA0 |

Other offsets return SLVERR. Byte strobes are honoured. Because ringing the
doorbell clears COMPLETION, the writer can never see the previous request's
completion. The host and the RoT reach the mailbox through the same AXI slave
port. The RoT's TileLink accesses are assumed to arrive already converted to
AXI.

## Timing

With a zero-wait mailbox, each AXI write takes two cycles: one for the
address and data handshake, one for the response. The doorbell write is
therefore accepted 9 clock edges after the edge at which a log is popped.
After COMPLETION rises, the verdict read takes 2 cycles, and `fault_o` comes
one cycle later. The whole round trip is dominated by the firmware's
per-check cost. The published estimates are about 267 cycles for the
interrupt-driven firmware, 112 when it polls the doorbell, and 73 with a
faster RoT interconnect. On top of that, the log writer's own bus traffic
adds about 14 cycles per log: 10 cycles to pop and to write and ring the
mailbox, and 3 to 4 cycles to read the verdict and return to IDLE.

## Size

Synthesized at the default parameters, `titancfi_top` has 361 flip-flop
bits of control and mailbox state. It also has 1792 bits of queue storage:
8 logs of 224 bits each. The published FPGA results report about 1.77 × 10³
extra registers for the host core. That is the same order as the queue
storage, which dominates this design.

## Interconnect path

`cfi_axi_mux` is the part of the host AXI crossbar that this traffic uses:
two masters share one slave. Master 0 is the log writer. Master 1 is the RoT,
coming through its TileLink-to-AXI bridge. The slave is the mailbox.

Reads and writes are arbitrated separately, round robin when both masters
request at once. After the address handshake, the channel stays locked to
its master until the response returns. Transactions are single beat.

The AXI bundle is two packed structs (`axi_req_t`, `axi_rsp_t` in `cfi_pkg`).
They have 64-bit addresses, 64-bit data and 4-bit IDs. Only the signals a
single-beat transaction needs are included.

## Parameters

| parameter | default | where | meaning |
|---|---|---|---|
| `QUEUE_DEPTH` | 8 | `titancfi_top`, `cfi_stage` (`DEPTH` in `cfi_queue`) | commit logs the queue holds; 8 is the size used for the published benchmark slowdowns, and 1 reproduces the "stall on every CF instruction" configuration used for comparison with other work |
| `MBOX_BASE` | `0x1040_0000` | `titancfi_top`, `cfi_stage`, `cfi_log_writer` | AXI address of the mailbox (this design's choice) |
| `NR_COMMIT_PORTS` | 2 | `cfi_commit_valid` | commit ports of the core |

## Files

| file | content |
|---|---|
| `rtl/cfi_pkg.sv` | widths, commit-log and scoreboard-entry structs, AXI structs, register offsets, instruction classifier |
| `rtl/cfi_filter.sv` | CF filter and commit-log builder (one per commit port) |
| `rtl/cfi_commit_valid.sv` | "V": hit qualified by commit acknowledge |
| `rtl/cfi_log_mux.sv` | "L" and multiplexer: selects the log to push |
| `rtl/cfi_queue_ctrl.sv` | stall rules, push and select |
| `rtl/cfi_queue.sv` | FIFO of commit logs |
| `rtl/cfi_log_writer.sv` | AXI FSM: write log, ring doorbell, wait, read verdict, fault |
| `rtl/cfi_stage.sv` | the commit-stage extension, all of the above wired |
| `rtl/cfi_mailbox.sv` | CFI mailbox register file, AXI slave |
| `rtl/cfi_axi_mux.sv` | 2-master, 1-slave AXI path |
| `rtl/titancfi_top.sv` | CFI stage + AXI path + mailbox |
| `tb/tb_commit_model.sv` | behavioural CVA6 commit ports: random consistent program, optional corrupted returns |
| `tb/tb_rot_fw_model.sv` | behavioural RoT: AXI master running a shadow-stack policy with a configurable per-check cost, interrupt or polling mode |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_titancfi_top` and `tb_cfi_workload` (with its helper `tb_cfi_workload_bench`) |

## Simulating

Every testbench is self-checking. It prints `TB_RESULT checks=N failures=M`
and stops itself through a watchdog if it hangs. Random initial values are
allowed: every register that is read is reset. To build and run one with
Verilator 5 from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_titancfi_top \
  -y rtl -y tb +libext+.sv -Irtl rtl/cfi_pkg.sv tb/tb_titancfi_top.sv
./obj_dir/Vtb_titancfi_top
```

Replace the top-module name and file to run another testbench.

* `tb_titancfi_top` is the end-to-end test, with every parameter at its
  default. Two complete systems run side by side. One has an interrupt-driven
  RoT model costing 267 cycles per check; the other has a polling RoT model
  costing 112 cycles. Each commit-port model retires 3000 instructions with
  calls, returns, indirect jumps and a few corrupted returns. The test checks
  three things: every CF log reaches the RoT once and in order with all four
  fields correct; a fault is raised exactly for each corrupted return and
  carries its log; no CF instruction retires into a full queue. It also
  requires that each mechanism happens at least once: full-queue stall, dual
  CF commit with port 1 held, push from port 1, fault, doorbell interrupt,
  doorbell polling, and the writer busy with an empty queue.
* `tb_cfi_workload` replays synthetic traces with the control-flow
  densities of benchmarks from the evaluation, at the three per-check costs.
  It holds two complete systems, each built from `tb_cfi_workload_bench`.
  The first has the default queue depth of 8 and runs five benchmarks with
  high control-flow density. The second has the queue constrained to depth
  1, so the core stalls as soon as a CF instruction is waiting. It runs the
  benchmarks used to compare against dedicated hardware CFI monitors. Each
  run checks three things: every log is checked, no fault is raised, and the
  run time lies within bounds set by the costs alone. It also prints the
  measured slowdown. The model retires one instruction per cycle and spreads
  calls uniformly, yet it lands near the published figures, for example:

  | trace | queue | cost 73 | cost 112 | cost 267 | published (73 / 112 / 267) |
  |---|---|---|---|---|---|
  | nbody | 8 | 208 % | 349 % | 886 % | 163 / 301 / 849 % |
  | cubic | 8 | 69 % | 121 % | 413 % | 46 / 107 / 390 % |
  | dhrystone | 8 | 322 % | 512 % | 1299 % | 260 / 452 / 1215 % |
  | dhrystone | 1 | 324 % | 526 % | 1271 % | 360 / 553 / 1318 % |

  The published numbers come from real, bursty instruction traces, so exact
  agreement is not expected. Sparse benchmarks make this clearest. Their
  published slowdowns of a few percent come from bursts of calls, but a
  uniform trace spaces the calls far enough apart that it shows no slowdown
  at all.
* The unit testbenches check each module against a reference written
  independently in the testbench. They cover the filter (random encodings),
  the queue (depths 8 and 1 against a reference queue), the queue controller
  and V block (exhaustively), the log writer (against an AXI slave model,
  including the 9-edge doorbell timing), the mailbox (random accesses and
  strobes against a reference register file), the AXI path (two concurrent
  masters against a memory model), and the CFI stage (every-cycle check of
  the stall rules).

## Relation to the published design

Taken from the published description: the three additions and their roles.
This includes:

* one filter per commit port selecting calls, returns and indirect jumps;
* the four fields and the 224-bit size of the commit log;
* a queue with one push per cycle and a queue controller that stalls on a
  full queue or on two simultaneous CF commits;
* a log-writer FSM that sends the log in 64-bit chunks, makes the doorbell
  write last, waits for completion, reads the verdict from the first mailbox
  entry and raises an exception;
* a mailbox whose completion flag goes straight to the CFI stage;
* queue depth 8.

Choices made here where the description stops:

* telling calls from returns by the `x1`/`x5` link-register convention;
* `next = pc + 2/4`;
* ignoring excepting instructions;
* per-port inhibit and the exact commit-stage handshake;
* stateless "L" and "V" blocks, which the block diagram only labels;
* the doorbell as a fifth, separate write;
* the register offsets, the verdict bit, and completion cleared by the
  doorbell;
* single-beat AXI and the struct-based bus bundle;
* asynchronous active-low reset;
* the mailbox base address.
* a mailbox register layout of its own. The published mailbox is modelled on
  the SoC's SCMI-style mailbox, but only its data, doorbell and completion
  registers matter here;
* reading "single entry FIFO" as "one entry pushed per cycle". The published
  description calls the queue a single-entry FIFO, but its benchmarks use a
  queue of 8 entries. Depth 1 is still one parameter away.

Not included:

* the CVA6 core itself, whose commit ports are ports of `titancfi_top`;
* the OpenTitan RoT (Ibex, interrupt controller, TileLink crossbar and
  bridge, memories, cryptographic accelerators);
* the existing SCMI mailbox;
* the rest of the host AXI crossbar;
* the firmware, which is software. Only its behaviour is modelled, in
  `tb/tb_rot_fw_model.sv`. The authenticated spilling of the shadow stack to
  main memory, which uses the RoT's crypto accelerators, is not modelled.

Simplifications to be aware of:

* `cfi_axi_mux` stands in for a full crossbar. It does not decode addresses,
  so anything attached to it sees every request.
* Pointing the exception at the right instruction is left to the core's
  exception logic. The hardware reports a violation after the fact, with the
  offending log.
