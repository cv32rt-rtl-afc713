# CV32RT interrupt subsystem: CLIC and the fastirq extension

A small RISC-V microcontroller core loses most of its interrupt response time
in software. Before the handler can call a C function, it must store every
caller-saved register on the stack. When it returns, it must load them back,
even if another interrupt is already waiting and will store the same
registers again. This RTL removes both costs, working as a wrapper around the
core's register file:

* **A second register bank.** When an interrupt is taken, the register file
  switches banks, so the handler starts on a clean set of registers. Hardware
  copies the interrupted context to the stack in the background, through a
  memory port of its own, while the handler already runs.
* **A new return instruction, `emret`.** When it sees a waiting interrupt
  that would have been taken anyway, it jumps straight to that handler. This
  is tail-chaining: no context is restored and then saved again. Otherwise it
  returns by switching back to the untouched bank, or leaves the return to
  software.

Interrupts reach the core through a CLIC, the RISC-V Core-Local Interrupt
Controller. It has 256 sources by default. Each source has a programmable
level and priority, which set preemption and arbitration, and its own
vector-table entry.

The RTL covers everything the extension adds to a CV32E40P-class four-stage
core. It does not contain the pipeline itself (fetch, decode, ALU, LSU):
every point where the pipeline connects is a port of the top module,
`cv32rt_irq_top`.

## Block map

```
 irq_i[255:0] --> clic_gateway --> clic_max_tree --> clic_target ==irq/ack/kill==> cv32rt_clic_csr
                      ^  ^                                ^                        |   |   |
 CLIC config bus --> clic_regs  (ie, trig, shv, ctl)   mintthresh <----------------+   |   | pc redirect,
                                                                                      |   | vector fetch
              pipeline RF ports (W0 W1 R0 R1 R2)                                      |   |
                        |                                                 entry, emret switch
                        v                                                             v
                  fastirq_regfile  <-- BANKSEL, sp switch, save read --  fastirq_ctrl --> save memory port
                  (2 x 16 regs, sp adder)                                 |  busy, frame base, words done
                                                                          v
                                         LSU addr --> fastirq_lsu_guard --> lsu_stall
```

| file | what it is |
|---|---|
| `rtl/cv32rt_pkg.sv` | types, CSR and register-map constants, the save-frame layout |
| `rtl/clic.sv` | the CLIC: `clic_regs`, `clic_gateway`, `clic_max_tree`, `clic_target` |
| `rtl/cv32rt_clic_csr.sv` | core-side CSRs, preemption rule, entry, `mret`, `emret`, `mnxti` |
| `rtl/fastirq_regfile.sv` | banked register file with save port and stack-pointer adder |
| `rtl/fastirq_ctrl.sv` | bank select, background-save FSM, per-bank machine state |
| `rtl/fastirq_lsu_guard.sv` | stall for loads and stores into the unsaved part of the frame |
| `rtl/fastirq_port_share.sv` | optional arbiter: save and LSU on one memory port |
| `rtl/cv32rt_irq_top.sv` | all of the above wired together |

## The CLIC

**Registers.** The CLIC is configured through a small memory-mapped register
bus. The register bus is a single-cycle valid/ready port with byte strobes.

* `cliccfg` is at offset 0x0:
  * `nlbits` in bits [4:1] sets how many upper bits of `clicintctl` are level
    bits. It resets to 8.
  * `nmbits` in bit [5] allows per-source privilege, machine or user.
* `clicinfo` is at offset 0x4. It is read-only.
* Source *i* has one word at `0x1000 + 4*i`:

| bits | field | meaning |
|---|---|---|
| 0 | `ip` | pending. Software may set or clear it for edge-triggered sources |
| 8 | `ie` | enable |
| 16 | `shv` | hardware vectoring. 1 means the core jumps through the vector table |
| 18:17 | `trig` | [0] = edge-triggered, [1] = active-low |
| 23:22 | `mode` | privilege of the source (used when `nmbits` = 1) |
| 31:24 | `ctl` | level in the upper `nlbits` bits, priority below them |

**Gateway.** The gateway registers every line and produces one pending bit
per source.
* A level-triggered source follows its line.
* An edge-triggered source sets its bit on the active edge.
* A software write also sets or clears the bit, and it wins over an edge
  arriving in the same cycle.
* A claim by the core clears the bit. A new edge in the same cycle wins over
  the claim, so that edge is not lost.

**Arbitration.** A binary tree compares one key per source, the concatenation
{privilege, `ctl`}. Because the level bits are the upper bits of `ctl`,
comparing the whole key orders sources by privilege, then level, then
priority. On equal keys the higher id wins. The tree is combinational, with
log2(N) levels. The root yields the winner's id, its key, and whether any
source is pending and enabled.

**Level.** The level given to the core is the `nlbits` upper bits of `ctl`,
with the bits below filled with ones. For example, with `nlbits` = 4,
`ctl` = 0x3A gives level 0x3F.

**Core interface.** `clic_target` offers one interrupt at a time as a
registered struct: valid, id, level, privilege, shv and kill_req.
* A machine-mode winner is offered only when its level is above
  `mintthresh`.
* The payload stays stable until the core acknowledges it.
* If the winner changes or stops qualifying while an offer is open, the CLIC
  raises `kill_req`. The core either still takes the interrupt (`ack`) or
  answers `kill_ack`, and the next offer starts afterwards.
* An `ack` pulses a claim back to the gateway.

From an interrupt line to a valid offer takes two clocks: one in the gateway
register and one in the offer register.

## Taking an interrupt

`cv32rt_clic_csr` holds these CSRs:
* `mstatus` (`mie`, `mpie`, `mpp`)
* `mtvec` (CLIC mode, base 64-byte aligned)
* `mtvt` (vector table base)
* `mepc`
* `mcause` in the CLIC layout: [31] interrupt, [30] `minhv`, [29:28] `mpp`,
  [27] `mpie`, [23:16] `mpil`, [11:0] id
* `mintstatus` (`mil` in [31:24])
* `mintthresh`
* `mnxti`

An offered machine-mode interrupt is taken in the cycle it is offered when
all of these hold:
* The hart runs below machine mode, or `mie` = 1 and the level is above
  `mil`.
* The pipeline says it can be redirected (`irq_allowed_i`).
* No background save is running.
* No CSR access, `mret` or `emret` is in that cycle.

In the same cycle:
* `mepc` gets `pc_i`.
* `mcause` records the id, the old `mie` as `mpie`, and the old `mil` as
  `mpil`.
* `mie` clears and `mil` takes the new level.
* The pipeline is redirected:
  * Vectored: `pc_target_o = mtvt + 4*id` with `vec_table_o` = 1. The
    pipeline loads the handler address from that table entry and then
    reports `vec_fetch_done_i`.
  * Non-vectored: `pc_target_o` is the `mtvec` base.

`mnxti` is for non-vectored handlers. A CSR access to it claims an offered
non-vectored interrupt whose level is above `mpil`. It updates `mil` and the
id in `mcause`, and returns `mtvt + 4*id`. If no interrupt qualifies it
returns 0. Its write operand acts on `mstatus`, as for any CSR
instruction.

## Bank switching and the background save

**Register file.** `fastirq_regfile` holds two banks of 16 registers, sized
for the RV32E embedded ABI. Register addresses are 5 bits wide; x16–x31 read
zero in this configuration. The pipeline's two write ports and three read
ports always reach the active bank, selected by `BANKSEL`. A fourth read port
reads the inactive bank for the save. Register x0 reads zero.

**In the entry cycle:**
* The sp adder writes `sp_active - STACKSIZE` (36 bytes) into the sp of the
  other bank.
* `BANKSEL` toggles.
* The handler therefore starts with a stack pointer that already lies below
  the space the old context will occupy. It may call functions at once.

**The save.** `fastirq_ctrl` then stores the 9-word frame, one word per grant
on the dedicated memory port, counting up from the new sp:

| word address | content | source |
|---|---|---|
| sp+4 | ra (x1) | inactive bank |
| sp+8 | t0 (x5) | inactive bank |
| sp+12 | a0 (x10) | inactive bank |
| sp+16 | a1 (x11) | inactive bank |
| sp+20 | a2 (x12) | inactive bank |
| sp+24 | a3 (x13) | inactive bank |
| sp+28 | t1 (x6) | inactive bank |
| sp+32 | mepc | machine-state register |
| sp+36 | mcause | machine-state register |

This is the frame the handler's software restore sequence expects: load these
words back, `addi sp, sp, 36`, `mret`. With a memory that grants every cycle
the save takes 9 cycles.

The machine-state register latches `mepc` and `mcause` in the first save
cycle. It also keeps one copy per bank, which the `emret` switch below relies
on.

**While the save runs (`busy`):**
* No further interrupt is taken. A higher-level interrupt that the handler
  enables at once waits until the save ends, then preempts with its own bank
  switch and save.
* `emret` is held.
* The LSU guard stalls any load or store whose word lies in the part of the
  frame not yet written, from `frame + 4*(done+1)` to `frame + 36`. Accesses
  to words already written, and everything outside the frame, proceed. A
  handler that reads the frame in save order therefore never stalls. Nothing
  is forwarded from the save path.

**One port instead of two.** By default the save has a memory port of its
own. With `SHARE_PORT` = 1 on the top, `fastirq_port_share` puts the save
and the LSU on a single port. Its rules:
* A free port goes to the save. The LSU then waits at most the length of the
  frame, and its accesses to the frame would stall in the guard anyway.
* A request that is waiting for its grant keeps the port. Address and data
  therefore never change before the grant.
* The memory must answer every granted request, stores too, in order. The
  arbiter queues the owner of each request (at most `MAX_OUT` = 2 open) and
  routes each response back by it.

In this mode the save takes longer whenever the LSU holds the port.

## `emret`: three ways out of a handler

`emret` replaces `mret` at the end of a fastirq handler. Once any save is
over, it does exactly one of three things:

1. **Chain.** An interrupt is offered that the *interrupted* context would
   take: the context had `mpie` = 1 and the level is above `mpil`, or it ran
   below machine mode. The interrupt is claimed and the pipeline jumps to its
   vector.
   * `mepc`, `mpil`, the banks and the saved frame are all left as they are.
   * The new handler returns to the same place the old one would have.
   * This is the case of a same-level, lower-priority interrupt that arrived
     during the handler and could not preempt it.
2. **Switch.** Nothing to chain, and the inactive bank still holds the
   interrupted context (`bank_restore_ok`: set on entry, cleared by a
   switch). The result is an `mret` plus a bank switch back, so the
   interrupted code resumes with all its registers intact and no loads. This
   is the fast path for short handlers.
   * `mepc` and `mcause` are then reloaded from the machine state latched when
     the bank being returned to was entered.
   * This matters after nesting. Handler A is preempted by B, and B's entry
     has overwritten `mepc`/`mcause`. When B switches back to A's bank, A gets
     its own return state again.
3. **Fall through.** Otherwise, for instance after a chain the task's bank
   was used by the first handler, `emret` does nothing. The software restore
   sequence that follows it reloads the frame and executes `mret`.

**RTOS context switches.** A software interrupt drives the same mechanism:
1. The yield code of the running task stores the registers the frame does
   not hold (the callee-saved ones).
2. It writes the `ip` bit of a CLIC source reserved for this.
3. The bank switch and the background save store the outgoing task's
   caller-saved registers and `mepc`/`mcause`. Meanwhile the scheduler
   already runs on the other bank and loads the incoming task's context.
4. The return is a plain `mret`, not `emret`. The incoming task keeps
   running on the bank the scheduler loaded. An `emret` would switch back to
   the outgoing task's bank.

## Timing summary (zero-wait memory)

| event | cycles |
|---|---|
| interrupt line to offer at the core | 2 |
| offer to entry (pc redirect, bank switch, sp update) | 0, combinational, commits at the next edge |
| background save of the frame | 9 (18 with `RVE` = 0) |
| higher-level interrupt during a save | waits for the save, then enters |

The handler's first instruction follows once the pipeline has fetched the
vector entry and the handler. That part of the latency belongs to the
pipeline, which is not modelled here.

## Where this RTL departs from, or goes beyond, the described design

* **No pipeline.** The fetch/decode/execute pipeline and the SoC memories are
  not included. The testbenches model them.
* **Embedded ABI by default.** The banks hold 16 registers, and the frame
  holds the embedded-ABI set shown above plus `mepc`/`mcause`.
  * Setting `RVE` = 0 on `cv32rt_irq_top` selects the integer-ABI option:
    banks of 32 registers and an 18-word frame (72 bytes).
  * That frame starts with the seven registers of the embedded frame. It then
    adds t2, a4–a7 and t3–t6, and ends with `mepc` and `mcause`.
  * The order of the added registers is this design's choice.
* **Machine mode only.** Interrupts are taken only in machine mode.
  User-mode sources can be configured but are never offered as takeable.
* **Not built:** the `jalmnxti` instruction. It belongs to the decoder and
  pipeline, which are not included.
* **Own choices, where the described behaviour leaves room:**
  * the emret chain condition (relative to the interrupted context's `mpil`)
  * the per-bank copy of the machine state
  * the fall-through outcome
  * the kill trigger
  * the register-bus protocol
  * the priority and response routing of the shared save/LSU port
* **Pipelined arbitration.** `TREE_PIPE` (default 0) adds register stages
  after the arbitration tree, on `clic` and `cv32rt_irq_top`. Each stage adds
  one clock of latency. The target then waits `TREE_PIPE` cycles after a
  claim before the next offer, so the claimed interrupt, still at the end of
  the pipeline, is not offered twice. The stages sit at the root of the tree;
  retiming in synthesis can spread them over the levels.
* **Threshold.** The test is strictly greater (level > `mintthresh`).

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops on a watchdog. With Verilator 5,
for example:

```
verilator --binary --timing --assert -y rtl -y tb rtl/cv32rt_pkg.sv tb/tb_cv32rt_irq_top.sv
./obj_dir/Vtb_cv32rt_irq_top
```

The block testbenches are `tb_clic_gateway`, `tb_clic_regs`,
`tb_clic_max_tree`, `tb_clic_target`, `tb_clic`, `tb_cv32rt_clic_csr`,
`tb_fastirq_regfile`, `tb_fastirq_ctrl` and `tb_fastirq_lsu_guard`;
`tb_clic_pipe` repeats the CLIC checks with `TREE_PIPE` = 2. They
compare against reference models or hand-worked values, and some use fewer
sources for speed. Reset everything the testbench reads: the simulator has
two states and starts uninitialised state at random values.

`tb_cv32rt_irq_top` runs the whole subsystem at its default size of 256
sources and acts as the pipeline and memory. It runs this scenario:
1. A vectored entry with the 2-clock latency checked.
2. The frame checked word by word, and an LSU stall.
3. A nested preemption that has to wait for the save.
4. An `emret` switch back.
5. A tail-chain.
6. A fall-through followed by a software restore.
7. A short handler whose `emret` is held.
8. A software-triggered interrupt, a kill, a non-vectored entry, an `mnxti`
   claim, and threshold masking.

At the end it counts how often each mechanism happened. Any mechanism that
never happened counts as a failure.

`tb_cv32rt_ctx_switch` does two RTOS task switches, A to B and back, the
way a fastirq-aware RTOS port would:
1. The outgoing task's yield code stores s0 and s1.
2. The yield code raises the software interrupt.
3. The hardware saves the rest of the context in the background.
4. Meanwhile the scheduler, on the fresh bank, loads the other task's
   context from that task's stack.
5. The scheduler executes `mret`.

The test checks that no scheduler load stalled, that the loads overlapped
the save, and that each task resumes with all its registers.

`tb_cv32rt_pkg` checks the frame layout constants against the restore
sequence.

`tb_cv32rt_irq_top_rv32i` runs the integer-ABI option (`RVE` = 0, 16
sources). It checks:
* all 31 task registers
* the 72-byte sp move
* the 18-cycle save and its frame
* an LSU stall on the last frame word
* the `emret` bank switch back
* with the shared port (`SHARE_PORT` = 1): a handler load issued during the
  save is granted right after the last frame word and returns its data

`tb_fastirq_port_share` drives the arbiter on its own: random grants,
responses delayed 1 to 4 cycles, and random LSU reads and writes checked
against a reference copy of the memory.

The widths and layout constants are in `cv32rt_pkg`: `NSAVE`, `STACKSIZE`,
the save-slot order in `save_slot_reg()`, and the register offsets.
`N_SOURCE` is a parameter of every CLIC module and of the top. The id width
of 12 bits allows up to 4096 sources.
