# FlexStep error-detection fabric in SystemVerilog

Safety-critical multi-core systems usually catch hardware faults with lock-step: two cores run
the same code cycle by cycle and a comparator flags any difference. The checker core is then
tied to its main core for good. It is wasted on tasks that need no checking, and it cannot be
preempted by an urgent task.

FlexStep removes that binding. Every core carries the same small set of extra units, and
software decides at run time which cores are *main* cores, which are *checker* cores and which
are ordinary *compute* cores. A thread on a main core is cut into **checking segments**. For each
segment the main core sends a stream of records through a buffer and an on-chip network to one
or more checker cores. The stream holds:

- the register state at the start;
- every memory access it made;
- the number of user-mode instructions;
- the register state at the end.

A checker replays the segment whenever its scheduler gets round to it: later, interleaved with
other tasks, and even interrupted. It loads the start state and runs the same code, taking load
values from the stream instead of memory. It then compares its own end state with the main
core's. Checking is therefore asynchronous, selective (only threads with checking enabled produce
segments) and preemptible.

This repository holds synthesizable RTL for that fabric:

- the per-core units;
- the global configuration register;
- the interconnect;
- a top level for an N-core system.

The host cores (in-order RISC-V Rocket cores) and their caches are not included. The top brings
out, for every core, the points where a host core would attach.

## Blocks

| module | role |
|---|---|
| `flexstep_pkg` | shared types: the 136-bit channel entry, the commit record, the core attributes, the custom-instruction opcodes |
| `flexstep_decode` | decoder for the nine custom instructions |
| `flexstep_global_reg` | which cores are main/checker, each main's checker set, check-enable and checker-busy bits |
| `flexstep_cpc` | Checkpoint Control: user-mode instruction counter, privilege monitor, sequencing of segments on both roles |
| `flexstep_ass` | Architectural State Snapshot: one copy of all 64 registers and a pc |
| `flexstep_mal` | Memory Access Log: packs memory accesses into entries (main), bypasses and compares them (checker) |
| `flexstep_fifo` | Data Buffer FIFO, 64 entries |
| `flexstep_interconnect` | full crossbar between the FIFOs, with broadcast and ownership per checker |
| `flexstep_unit` | one core's complete set: CPC + ASS + MAL + FIFO + custom-instruction execution |
| `flexstep_soc` | top: NCORES units, the global register and the interconnect |

The defaults give the per-core storage of the reference system:

- an 8-byte CPC (two 32-bit counters);
- a 518-byte ASS (64 × 8-byte registers plus a 6-byte pc);
- a 1088-byte buffer (64 entries of 136 bits).

The default top has 4 cores, and the segment limit is 5000 instructions.

## The segment stream

Every entry is 136 bits: `kind[3] | tag[5] | a[64] | b[64]`. One segment is sent as:

```
SCP  x32   register pairs (tag = pair index, a = reg 2k, b = reg 2k+1)
SCP_PC     a = pc of the first instruction of the segment
LDST ...   one per memory micro-op, tag = {uop, 0, op}, a = address, b = data
IC         a = number of user-mode instructions in the segment
ECP  x32   register pairs at the end
ECP_PC     a = pc of the instruction after the last one
```

Registers 0..31 are the integer registers and 32..63 the floating-point registers, as the
host's register file numbers them. Plain loads and stores take one LDST entry.

LR, SC and AMO take two entries, so that an entry never has to hold more than one address and
one data word:

| op | uop 0 | uop 1 |
|---|---|---|
| LR | load data | 1 |
| SC | store data | SC result |
| AMO | old value | value written |

## Main-core side (CPC, ASS, MAL)

A segment opens when checking is enabled and a user-mode instruction is about to commit. Before
that instruction commits, CPC copies the register file into the ASS, one register per cycle. The
core is stalled for those 64 cycles. The snapshot then streams out as the SCP. While it does,
the core keeps committing instructions that neither touch memory nor end the segment.

Inside the segment, user-mode commits are counted and memory commits are logged by the MAL.
The segment ends in three cases:

- the count reaches `IC_LIMIT`: CPC sends IC, copies the registers again and sends them as the
  ECP. The same snapshot then goes out a second time as the SCP of the next segment, so segments
  follow each other without a gap;
- an instruction is about to commit in kernel mode (system call, interrupt): CPC sends IC and the
  ECP. Kernel code is never counted or logged, and the next user-mode commit opens a new segment;
- checking is disabled (`M.check(0)`, done by the scheduler at a context switch): CPC sends IC
  and the ECP.

When the FIFO is full, memory commits stall until there is room. This is the only way the
checkers slow the main core down.

## Checker-core side

The checker runs an ordinary software thread built from the custom instructions:

```
C.check_state(1)          mark this core busy (its user-mode commits are now counted)
loop:
  C.record                save this thread's own registers and return pc in the ASS
  C.apply                 pop the SCP from the FIFO into the register file (waits for it)
  C.jal                   jump to the segment's first pc -> replay runs on the main core's code
  ... replay ...          the unit redirects the core back to the recorded pc at the end
  C.result                1 if the segment matched
```

During replay:

- loads take their data from the log (`byp_rdata`).
- The address, the op and any written data are compared with the main core's.
- Kernel-mode commits are not counted. Neither are commits while the core is marked idle.
  So an interrupt during replay (a "kernel detour"), or a higher-priority task that preempts the
  checker thread, does not disturb the check.

**The hardest part is knowing when the segment ends.** The IC entry arrives only after all of
the segment's memory entries. So a checker that is running ahead does not yet know how long its
segment is. The unit lets a counted commit complete only when it is sure to lie inside the
segment. That is the case when either:

- the FIFO head is an LDST entry, which means the main core made at least one more memory
  access in this segment; or
- the IC has been received and the count is still below it.

Otherwise the commit waits. Once the count equals the IC:

1. the core is stalled;
2. the 32 ECP entries are compared two registers at a time with the register file;
3. the pc of the next instruction is compared with `ECP_PC`;
4. the recorded context is written back from the ASS;
5. the core is redirected to the recorded pc.

A checker that reaches `IC_LIMIT` with memory entries still unused, or makes a memory access the
main core did not make, has diverged. It fails the segment and discards the rest of it.

## Channels and conflicts

`M.associate(mask)` gives a main core its checker set. With one bit set, checking is dual-core.
With two bits set, the interconnect broadcasts every entry to both checkers (triple-core). An
entry leaves the main FIFO only when all of its checkers have room for it.

Each checker is owned by one main core at a time. If two main cores want the same checker, the
one that does not own it keeps its entries in its own FIFO, and its `channel_blocked` bit is set.
The owner releases the checker when it has checking disabled and nothing left to send. Checking
is only ever disabled between segments, so a segment is never split between owners. The next
owner is the lowest-numbered main core that is waiting.

## Custom instructions

All nine instructions use the RISC-V custom-0 opcode (`0001011`), R-type, with `funct3 = 0` and
`funct7` holding the operation number:

| funct7 | instruction | operands / result |
|---|---|---|
| 1 | G.IDs.contain | rs1 = core number; rd = 0 compute, 1 main, 2 checker |
| 2 | G.Configure | rs1 = main-core mask, rs2 = checker-core mask |
| 3 | M.associate | rs1 = checker mask of this main core |
| 4 | M.check | rs1[0] = enable checking |
| 5 | C.check_state | rs1[0] = busy |
| 6 | C.record | saves registers and the instruction's next pc; multi-cycle |
| 7 | C.apply | multi-cycle, completes when the whole SCP is applied |
| 8 | C.jal | rd = first pc of the applied segment |
| 9 | C.result | rd = 1 if the last checked segment matched |

M.associate and M.check only act on a main core, and C.check_state only on a checker core.
Issued on any other core, they complete and change nothing.

## Host-core interface (per core, see `flexstep_unit`)

- **Commit:** `cm_valid`, `cm` (user mode, pc, npc, memory op, address, store and load data) and
  `cm_ready`. `cm_ready` is combinational and may depend on `cm`. `byp_rdata` is valid in the
  cycle a checker's memory commit completes.
- **Register file:** one combinational read port and one write port. `redir_valid`/`redir_pc`
  set the host pc.
- **Custom instructions:** `isa_valid`, `isa_instr`, `isa_rs1`, `isa_rs2`, `isa_npc`,
  `isa_ready` and `isa_rd`. A multi-cycle instruction holds `isa_ready` low.

All logic is on one clock, with a synchronous active-low reset.

## Where this design departs from or adds to the source description

The description this RTL follows names the units and their roles, gives the segment boundary
rules, the 5000-instruction default, the stream order and the storage sizes. The following are
this design's own choices:

- **Entry format and custom-instruction encoding.** The entry layout, the two-entry layout of LR
  / SC / AMO, and the custom-instruction encoding are all this design's choice. So is reading
  the 518 B and 1088 B figures as 64 × 8 + 6 and 64 × 136 bits.
- **Segment rules.** Disabling checking also closes a segment. The snapshot is copied one
  register per cycle.
- **Checker behaviour.** The checker-side gating rule and the divergence guard are this design's.
  So are counting only while the checker is busy, and the restore-and-redirect at the end of a
  check.
- **Interconnect.** The ownership and release rule, and lowest-number priority, for the
  interconnect and for same-cycle `G.Configure`.
- **Waiting for the SCP.** The checker thread in the source polls for a new SCP before applying
  it. Here `C.apply` itself stalls until the whole SCP has arrived, so no polling instruction is
  needed.
- **Where memory data enters.** Memory data is presented at commit, not captured in decode and
  piped to commit inside the host pipeline.
- **Not built.**
  - The optional overflow buffer in main memory reached by DMA is mentioned in the source but
    not specified.
  - The host cores and caches are outside this RTL.
- **Crossbar size.** The crossbar is fully connected. Its cost grows as NCORES², and core masks
  limit it to 32 cores. The SoC lints clean at 2, 16 and 32 cores. A generic synthesis
  pass gives about 5.3k cells at 8 cores and 13k at 16, which is roughly 2.4 times as much
  logic for twice the cores.

## Cost to the main core

A main core loses cycles in two ways:

- it stalls for the 64-cycle register copy at each segment boundary;
- it stalls when its FIFO is full because a checker lags behind.

A checker spends some fixed work on every segment: record, apply, the ECP compare and the
restore, each about 64 cycles. So it keeps up only if its replay is faster than the main core's
original run. That is normally the case, because the checker takes all load data from its FIFO
and never waits for a cache.

The behavioural host core in the testbenches runs one instruction per cycle in both roles. It
also enters the kernel about every 4096 instructions, which keeps segments short. Under those
conditions `tb_flexstep_slowdown` measures about 30 % slowdown, in both dual-core and
triple-core mode. This figure is a property of that model, not of the fabric. The source reports
1.07 % and 1.77 % for real programs on Rocket cores.

## Testbenches

Every testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=<n> failures=<m>`.

| testbench | what it checks |
|---|---|
| `tb_flexstep_decode` | every opcode, wrong opcode/funct3, operand fields |
| `tb_flexstep_fifo` | random push/pop against a queue model, full/empty, simultaneous push and pop |
| `tb_flexstep_ass` | register and pc storage, SCP/ECP formatting |
| `tb_flexstep_global_reg` | random requests from all cores against a model, same-cycle G.Configure priority |
| `tb_flexstep_interconnect` | random traffic with 1-to-1 and 1-to-2 channels and conflicts, order and completeness of every stream |
| `tb_flexstep_mal` | entry contents of every op, two-entry back-pressure, checker bypass and mismatch detection |
| `tb_flexstep_cpc` | segment stream predicted independently (limit, kernel and disable ends), snapshot stall, replay with held-off commit, ECP pass/fail, restore and redirect |
| `tb_flexstep_unit` | a main and a checker unit joined directly, configured through the custom instructions, with replay of three segments, one of them faulty |
| `tb_flexstep_soc` | the 4-core top at its default parameters (5000-instruction segments) |
| `tb_flexstep_slowdown` | the same program on core 0 with checking off, in dual-core and in triple-core mode, at default sizes; prints the main-core slowdown |
| `tb_flexstep_fault_latency` | fault campaign at default sizes: random bit flips in ECP registers, logged addresses and store data on the link, each must be detected; prints the detection-latency histogram |

`tb_core_model` is a behavioural stand-in for a host core. It runs a pseudo-random program
derived from the pc: ALU operations, loads, stores, LR/SC/AMO and occasional system calls. It is
used only by `tb_flexstep_soc`.

The system test covers two phases:

- **Phase A:** core 0 is checked by cores 1 and 2 at once. One checker starts late, so the main
  core stalls on a full FIFO. The other is preempted by an unrelated task mid-segment, and one
  takes interrupts during replay. Two faults are injected into forwarded data: one register
  value in an ECP and one logged store. Both checkers must report exactly those segments as
  failed.
- **Phase B:** cores 0 and 3 both use checker 1, so one must wait for the other.

The testbench counts every mechanism and fails if any of them never happened. Those mechanisms
are segment ends by limit, privilege and disable; two-entry operations; FIFO stalls; channel
blocking; broadcast; preemption; kernel detours; and detected faults.

To simulate one testbench with Verilator (5.x), for example the unit test:

```
verilator --binary --timing --assert -Irtl -Itb rtl/flexstep_pkg.sv \
  rtl/flexstep_decode.sv rtl/flexstep_cpc.sv rtl/flexstep_ass.sv rtl/flexstep_mal.sv \
  rtl/flexstep_fifo.sv rtl/flexstep_global_reg.sv rtl/flexstep_unit.sv \
  tb/tb_flexstep_unit.sv --top-module tb_flexstep_unit -o sim
./obj_dir/sim
```

For the system test, add `rtl/flexstep_interconnect.sv`, `rtl/flexstep_soc.sv` and
`tb/tb_core_model.sv`, and use `--top-module tb_flexstep_soc`. The fault campaign uses the same file list as the unit
test with `--top-module tb_flexstep_fault_latency`. Each simulation ends within seconds.
