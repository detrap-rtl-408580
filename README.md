# DeTRAP breakpoint hardware: write-protecting a shadow stack with RISC-V debug triggers

Return-address protection on a small microcontroller usually costs a memory
protection unit, privilege switches, or heavy compiler analysis. DeTRAP gets a
write-protected shadow stack from hardware that a RISC-V core may already
have: the debug triggers. Debug triggers compare a PC or a load/store address
with a programmed value. Several triggers can be chained so that a breakpoint
fires only when all of them match. The runtime sets up one such chain: "the
instruction lies in untrusted code **and** it stores below a fixed address".
Any store that untrusted code makes into protected memory then traps before it
is performed. No check is added to the program, and nothing slows down while
no violation happens.

The rule needs a chain that mixes a **PC** trigger with a **store-address**
trigger. The debug specification allows such chains. However, a pipelined
breakpoint unit checks the PC in one stage and the memory address in a later
stage, so in any one cycle the two checks see different instructions. This
RTL is a breakpoint (trigger) module that handles mixed chains correctly. Each
instruction's PC-match results (its *pretriggers*) travel down the pipeline
with that instruction. At the memory stage they are combined with the
load/store address matches.

Everything here is synthesizable SystemVerilog (IEEE 1800-2017). The default
configuration is the evaluated one: a 32-bit core with 8 address-match
triggers.

## 1. The protection policy the hardware must support

DeTRAP arranges memory so that two comparisons are enough to describe "write
by untrusted code into protected memory". All protected data sits at the
bottom of the address space, and so does all trusted code:

```
 0x0000_0000                                                         top of RAM
 | MMIO | trusted | untrusted | trusted data | shadow  | untrusted | untrusted | untrusted | untrusted |
 |      | code    | code      | rodata, bss  | stack ->| rodata    | <- stack  | data/bss  | heap ->   |
 |<-- privileged -->|
 |<------------------- write-limited region ------------------------>|<---- freely writable ----->|
```

The runtime programs three triggers:

| trigger | condition                                  | chain            | purpose                                        |
|---------|--------------------------------------------|------------------|------------------------------------------------|
| 0       | execute, PC >= bottom of untrusted code    | chained to 1     | "the instruction is untrusted"                 |
| 1       | store, address < bottom of untrusted stack | ends the chain   | "it writes into the write-limited region"      |
| 2       | store, address == last shadow-stack slot   | alone            | shadow-stack overflow, from any code           |

A few properties follow from this layout:

* The untrusted stack grows down, towards the write-limited region. So an
  untrusted stack overflow is caught by the same chain at no extra cost.
* MMIO is inside the write-limited region. Untrusted code therefore cannot
  program a DMA engine to get around the protection.
* The shadow stack only grows by one slot at a time. A single equality trigger
  on its last slot is therefore enough to stop an overflow.

The breakpoint exception goes to the trusted runtime's trap handler, which
stops the program. Keeping trigger configuration out of reach of untrusted
code (no CSR writes to the trigger registers) is the job of a static scanner
of the binary. It is not a hardware function.

## 2. Why mixed chains need pipeline support

In an in-order pipeline (fetch, decode, execute, memory, writeback), a chain
made only of PC triggers is resolved early, when the instruction enters
decode. A chain made only of address triggers is resolved at the memory
stage. If the hardware simply ANDs "a PC trigger matched this cycle" with "an
address trigger matched this cycle", it combines the PC of one instruction
with the store address of an instruction two stages older.

A common earlier implementation chained each access type separately: read
with read, write with write, execute with execute. Such a unit can never fire
the chain above, even though its configuration registers accept it.

The fix adds one register per trigger at two pipeline boundaries:

```
cycle:            n              n+1                 n+2
stage:          decode         execute             memory
                  |               |                   |
 pc_bpu:   pretrig = PC-match     |                   |
                  |--[ex_pretrig reg]-->|              |
                                  |--[mem_pretrig reg]-->|
 mem_bpu:                                       pretrig + store-address match
                                                -> chain result -> xcpt_st
```

Each register follows the control of the pipeline register beside it:

* On a stall it holds its value.
* When the pipeline register loads, it loads too.
* When the stage is flushed or receives a bubble, it clears.

So the pretriggers that reach the memory stage always belong to the
instruction that is in the memory stage. A flushed instruction's pretriggers
cannot leak into the instruction that follows it.

## 3. How a chain is evaluated

Trigger *i* with `chain = 1` is joined to trigger *i+1*. A chain ends at the
first trigger whose `chain` bit is 0, and it reports with that last trigger's
`action`. At most two triggers form one chain (see section 4), so 8 triggers
hold up to four rules. A trigger counts as matching an instruction when any of
its enabled conditions matches:

* **execute**: its pretrigger bit is set. That is, the instruction's PC
  matched when it entered decode, in an enabled privilege mode.
* **load / store**: the access at the memory stage is of that kind, and its
  effective address matches.

The same chain result is computed in two places:

| where             | which chains fire                                            | outputs                 |
|-------------------|--------------------------------------------------------------|-------------------------|
| `pc_bpu` (decode) | every member matched on the PC                               | `xcpt_if`, `debug_if`   |
| `mem_bpu` (memory)| every member matched, and at least one matched on the address | `xcpt_ld/st`, `debug_ld/st` |

The "at least one matched on the address" condition keeps an execute-only
chain from being reported a second time at the memory stage. `action = 0`
raises a breakpoint exception. `action = 1` asks to enter debug mode. No
trigger matches while the hart is in debug mode.

All of the debug specification's address comparisons are available, and
all are unsigned:

* equal, greater-or-equal, less-than;
* NAPOT, where the trailing ones of `tdata2` select a naturally aligned range;
* masked low half and masked high half, where the upper half of `tdata2` is a
  mask and the lower half is the value the masked address half must equal;
* the negations of equal, NAPOT and the two masked matches.

The policy itself uses only `>=`, `<` and `==`.

## 4. Trigger registers

The registers are the standard RISC-V trigger CSRs: `tselect` (0x7A0),
`tdata1` (0x7A1, in the *mcontrol* format), `tdata2` (0x7A2), `tdata3`
(0x7A3, reads 0) and `tinfo` (0x7A4, reads 0x4: only type 2 is supported).
Every write is write-any-read-legal. A read-back shows exactly what the
hardware will do. This matters because software checks support by reading
back what it wrote.

`tdata1` (mcontrol, XLEN = 32):

| bits  | field    | legal values in this design                                          |
|-------|----------|----------------------------------------------------------------------|
| 31:28 | type     | fixed 2                                                              |
| 27    | dmode    | settable only in debug mode; a dmode trigger ignores other writes    |
| 26:21 | maskmax  | fixed 31                                                             |
| 20    | hit      | 0                                                                    |
| 19    | select   | 0 (address match only)                                               |
| 18    | timing   | 0 (before the access)                                                |
| 17:16 | sizelo   | 0                                                                    |
| 15:12 | action   | 0 breakpoint; 1 enter debug mode (only when dmode = 1)               |
| 11    | chain    | see below                                                            |
| 10:7  | match    | 0 =, 1 NAPOT, 2 >=, 3 <, 4 mask-low, 5 mask-high, 8 !=, 9 not NAPOT, 12/13 not mask-low/high; others are stored as 0 |
| 6     | m        | machine-mode enable                                                  |
| 4     | s        | 0 (no supervisor mode)                                               |
| 3     | u        | user-mode enable                                                     |
| 2/1/0 | execute / store / load | free                                                   |

A write of `chain = 1` is kept only if all of the following hold:

* the trigger is not the last one;
* neither neighbour already chains, so chains stay at two triggers;
* the trigger is not chaining into a dmode trigger unless it is dmode itself.

`tselect` ignores values of 8 and above.

## 5. Modules

| file                      | role                                                                                   |
|---------------------------|----------------------------------------------------------------------------------------|
| `rtl/detrap_pkg.sv`       | XLEN, NTRIG, CSR addresses, `mcontrol_t`, `trig_t`, encodings, privilege-enable function |
| `rtl/trigger_csr.sv`      | the CSRs above with WARL filtering; exports `trig_t [N-1:0]`                           |
| `rtl/addr_compare.sv`     | one trigger's comparator                                                               |
| `rtl/chain_eval.sv`       | chain combination (section 3), used by both breakpoint units                           |
| `rtl/pc_bpu.sv`           | pretriggers and fetch breakpoints                                                      |
| `rtl/pretrigger_pipe.sv`  | the two pretrigger registers                                                           |
| `rtl/mem_bpu.sv`          | load/store matches combined with pretriggers; load/store breakpoints                   |
| `rtl/detrap_bpu_top.sv`   | the whole trigger module; parameter `N` (default 8)                                    |

### Hooking `detrap_bpu_top` into a core

| signals                                   | connect to                                                                 |
|-------------------------------------------|----------------------------------------------------------------------------|
| `csr_addr`, `csr_wen`, `csr_wdata`        | the core's CSR unit. `csr_wdata` is the final value after the CSR instruction's read-modify-write. Writes take effect at the clock edge. |
| `csr_rdata`, `csr_hit`                    | returned combinationally                                                   |
| `dec_valid`, `dec_pc`                     | the instruction entering decode                                            |
| `xcpt_if`, `debug_if`                     | the fetch breakpoint for that instruction, combinationally. The core should mark the instruction as excepting; it then performs no memory access. |
| `id_ex_load/kill`, `ex_mem_load/kill`     | the enable and bubble/flush of the core's ID/EX and EX/MEM registers. `kill` wins over `load`. |
| `mem_valid`, `mem_load`, `mem_store`, `mem_addr` | the instruction at the input of the memory stage (the registered output of execute) and its effective address |
| `xcpt_ld/st`, `debug_ld/st`               | combinational, in the same cycle, before the access. The core must suppress the access and take the exception (cause 3, breakpoint) or enter debug mode. |
| `priv`, `debug_mode`                      | current privilege level and debug state                                    |

All flops use a synchronous, active-low reset. After reset every trigger is
disabled. The triggers themselves add no latency, because everything after
the registers is combinational. The cost is the comparator and chain logic on
the decode-PC path and on the memory-address path.

The whole module at its defaults comes to about 730 word-level cells after
coarse synthesis. It holds 19 flip-flops (two 8-bit pretrigger registers and
`tselect`) and 352 bits of trigger configuration (8 × (`tdata1` fields +
`tdata2`)). Of that, only the 16 pretrigger bits are the price of mixed-chain
support.

## 6. What follows the evaluated system, and what is this design's own choice

These points follow the evaluated system:

* 32-bit core, 8 address-match triggers. This is the evaluated FPGA
  configuration. The area comparison was made on a smaller core with 4
  triggers. That configuration is `N = 4`, which still holds the
  three-trigger policy.
* Three triggers programmed as in the table in section 1.
* Pretrigger registers at the outputs of decode and execute.
* The memory-stage unit checks the registered output of execute.
* Chains of at most two triggers.

These points are this design's own choices:

* **Where the PC is checked.** The PC compared is that of the instruction
  entering decode, where Rocket-class cores raise their fetch breakpoint.
  This makes the first pretrigger register sit at the decode output.
* **Reporting a chain once.** Execute-only chains fire at decode, and chains
  with a memory member fire at the memory stage.
* **Supported fields.** Only address matches are supported. There is no
  match on the loaded or stored data value, no "after the access" timing, no
  access-size qualifier, no supervisor enable and no `hit` bit.
* **WARL rules and reset.** The legality rules of section 4 and the reset
  behaviour.
* **Privilege at the memory stage.** A pretrigger is used as captured. The
  privilege enable is not re-checked at the memory stage.
* **Policy boundary.** One description of the write-protection rule says
  "PC >= bottom of untrusted code" and another says "PC greater than the top
  of the privileged code". Both name the same boundary. The hardware supports
  either comparison, and the testbench programs >=.

The rest of the system is not part of this RTL: the core pipeline, FPU,
branch predictors, PMP, caches, DRAM and debug module. The same holds for the
software half of DeTRAP: the compiler's trampolines and epilogues, the
forward-edge CFI, the trusted trap handler and the binary scanner. The
module's ports are the points where the core connects.

## 7. Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| testbench                 | what it checks                                                                                      |
|---------------------------|-----------------------------------------------------------------------------------------------------|
| `tb_addr_compare`         | boundaries of every match type and random values, against a range-arithmetic reference              |
| `tb_chain_eval`           | random hit/chain vectors in both modes, against a reference that walks back from each chain end     |
| `tb_pc_bpu`               | random legal configurations, privilege and debug states, against `tb/detrap_ref_pkg.sv`              |
| `tb_mem_bpu`              | the DeTRAP rules directly, then random configurations against the reference model                   |
| `tb_pretrigger_pipe`      | random stalls, bubbles and flushes against a two-register reference                                 |
| `tb_trigger_csr`          | reset values, `tselect` range, every WARL rule, dmode lock, exported configuration                  |
| `tb_detrap_bpu_top`       | end to end at default size (see below)                                                              |
| `tb_shadow_stack_calltrace` | call/return store pattern with 4 triggers (see below)                                            |

`tb_detrap_bpu_top` programs the policy through the CSR port for the memory
map in section 1, using example addresses. It then streams 30,000 cycles of
random trusted and untrusted instructions through a three-stage pipeline
model, with random memory stalls, branch flushes and trap flushes. The
expected breakpoint for every access is worked out from the memory map alone,
not from trigger semantics. The test also counts the following events and
fails if any of them never happens:

* a write-protection trap;
* an untrusted stack overflow;
* a shadow-stack overflow;
* a trusted store into protected memory that passes;
* an untrusted store elsewhere that passes;
* a fetch breakpoint;
* a masked (page) load match;
* a debug-mode action;
* a stall;
* a flush;
* a rejected three-trigger chain.

A typical run reports about 1,300 write-protection traps, 290 stack
overflows, 110 shadow-stack overflows and 3,400 stalls. It takes well under a
second.

`tb_shadow_stack_calltrace` uses the module with 4 triggers, the smallest
configuration that holds the policy. It streams the loads and stores of
instrumented calls and returns:

* a trampoline in trusted code stores `ra` to the shadow stack;
* the prologue in untrusted code keeps a copy of `ra` on the untrusted stack;
* the epilogue loads `ra` back from the shadow stack.

It checks three cases, each against arithmetic from the sizes:

* Deep recursion traps first on the trampoline store into the last
  shadow-stack slot, at depth 64 for a 64-slot shadow stack.
* Recursion with 64-byte frames traps first when the untrusted stack drops
  below its bottom, at depth 2048/64 + 1 = 33.
* In random call trees, an injected store by untrusted code into the shadow
  stack is the first and only trap.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb rtl/detrap_pkg.sv \
          tb/detrap_ref_pkg.sv tb/tb_detrap_bpu_top.sv --top-module tb_detrap_bpu_top
./obj_dir/Vtb_detrap_bpu_top
```

The reference package is needed only by `tb_pc_bpu` and `tb_mem_bpu`, and
adding it to the other testbenches does no harm. To lint the RTL:
`verilator --lint-only -Wall -y rtl rtl/detrap_pkg.sv rtl/detrap_bpu_top.sv`.
Three width warnings are expected, for unused bits of `tdata1` and
`ex_pretrig`, which is only passed from one pretrigger register to the next.
To change the number of triggers, override `N` on `detrap_bpu_top`, or
`NTRIG` in the package for the testbench reference model.
