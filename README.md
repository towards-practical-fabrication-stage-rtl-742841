# Interrupt-resilient hardware trojans: trigger and payload RTL

A trojan in a CPU pairs a *trigger*, which tells it when to act, with a *payload*, which is
what it does. On a real system the attacker's process, called the handling process here,
never owns the CPU for long. The scheduler preempts it when its time quota expires, and
interrupts and kernel work push it out at unpredictable moments. A trigger that the process
sets once can be lost at a context switch, or can be stale when the process resumes, and
then the attack fails in a way that draws attention. An *interrupt-resilient trojan* (IRT)
uses a trigger that survives context switching. There are two ways to build one:

* **IRT-1, selectively ready.** The trigger is a pure function of architectural state that
  the operating system itself saves and restores. Here that state is two 64-bit general
  purpose registers. The trigger is high only while the handling process is on the CPU.
  The OS turns it off when it saves the registers and back on when it restores them. The
  trojan keeps no state of its own.
* **IRT-2, always ready.** The trigger watches state that the OS does *not* restore: the
  two operands of the integer adder. A single `add` with a secret activation pair moves a
  two-state FSM to "enabled". The FSM stays there through every context switch, whatever
  process runs, until an `add` with a secret de-activation pair moves it back.

Both triggers drive one payload. It sits in the MMU on the User bit (U) of the page table
entry being checked. While the trigger is high, a user-mode store to a kernel page (U = 0)
reaches the exception check with U = 1. The check therefore raises no store page fault, and
the handling process writes kernel memory.

The trojans are meant to be inserted at the foundry into a finished layout of a 64-bit
RISC-V core. The core is not part of this RTL. The nets the trojan reads and the one it
changes are the ports of `irt_top`.

## Blocks

| file | role |
|---|---|
| `rtl/irt_pkg.sv` | widths (XLEN = 64, 128-bit triggering values), privilege enum, variant enum, default keys |
| `rtl/trigger_value_matcher.sv` | detects one 128-bit constant on a bus through an AND → NAND → NOR gate tree |
| `rtl/irt1_trigger.sv` | IRT-1: one matcher on {second GPR, first GPR} |
| `rtl/irt2_trigger.sv` | IRT-2: ON and OFF matchers on {operand b, operand a}, two-state FSM |
| `rtl/irt_payload.sv` | U-bit override for user-mode stores while triggered |
| `rtl/irt_top.sv` | one trojan: the trigger chosen by `VARIANT`, wired to the payload |

## The triggering-value matcher

Each trigger asks whether 128 ordinary host nets carry one secret value. The nets are
frequently toggling datapath wires, not rare internal signals. The attacker can drive them
from unprivileged code (`li`/`add` into two registers, or an `add` of two registers), and a
128-bit match is practically impossible by accident. `trigger_value_matcher` builds the
comparison from two gate patterns whose outputs rarely change, AND feeding NAND and NAND
feeding NOR:

```
lit[i]  = value[i] XNOR KEY[i]             (a plain wire or an inverter for a constant key)
and[g]  = AND of lit[4g .. 4g+3]            32 gates for 128 bits
nand[n] = NAND(and[2n], and[2n+1])         16 gates
match   = NOR(nand[0..15])                 1 gate
```

The result is exactly `value == KEY`. For 128 bits the tree has 49 gates, plus the
inverters that a constant key folds away. The four-input AND and the pairing under each
NAND are this design's choice. The parameter `GROUP` changes the AND fan-in.
`WIDTH` must be a multiple of `2*GROUP`.

## IRT-1: following the register file

`irt1_trigger` has no clock. `trigger_o = ({gpr_b_i, gpr_a_i} == KEY)`, where the inputs are
the flip-flop outputs of two registers in a flip-flop based register file. (An SRAM register
file offers no such nets. In that case another host from the table below has to be used.)
An attack runs like this:

1. The handling process loads the two key halves into the two registers. The trigger rises.
2. The kernel preempts the process. It saves the registers to memory and then uses them
   itself. The trigger falls.
3. The kernel restores the process. The key returns to the registers, and so does the trigger.
4. Each store to a kernel address needs a page table walk, which takes several cycles. That
   walk hides the time the trigger needs to cross the die to the MMU. In the layout, the
   trigger wire is a multi-cycle path, possibly with repeaters. In RTL it is a plain wire.
5. At the end the process overwrites one register, and the trojan is dormant again.

## IRT-2: the always-ready FSM

```
            ON = 1                      S0 (disable): trigger 0; stays while ON = 0
   S0  ───────────────▶  S1            S1 (enable):  trigger 1; stays while OFF = 0
       ◀───────────────
            OFF = 1
```

ON means `{operand_b, operand_a} == ON_KEY`, and OFF means the same against `OFF_KEY`. The
state is one flip-flop and `trigger_o` is that state. The trigger therefore rises on the
clock edge that samples the activation pair and falls on the edge that samples the
de-activation pair. Because ON and OFF use different keys, they are never high together,
and an assertion checks this. Reset is asynchronous and active low, and it enters S0. The
paper fixes the states, the transition conditions and the trigger values. The registered
output and the reset style are this design's own choices.

IRT-2 needs no cooperation from the OS. The price is the FSM and a second comparator. A
side effect is that while it is armed, *any* user process's stores to kernel pages pass.

## The payload and why it only touches user-mode stores

```
pte_u_o = pte_u_i | (trigger & is_store & priv == U)
```

The description says only that the payload presents a modified U-bit to the exception logic
so that faulty stores raise no exception. This design limits the override to user-mode
stores. Under the RISC-V rules, a supervisor access to a page with U = 1 faults (unless
`SUM` is set). Forcing U = 1 for every store would therefore make the kernel's own stores
fault, and that would happen constantly while IRT-2 is armed. Loads and machine-mode accesses
are never touched either.

## Top level and its ports

`irt_top #(VARIANT, XLEN, IRT1_KEY, IRT2_ON_KEY, IRT2_OFF_KEY)` elaborates one trigger. A
given chip carries one variant, so the two are never built together. The default is IRT-1.

| port | dir | width | connects to |
|---|---|---|---|
| `clk_i`, `rst_ni` | in | 1 | core clock and reset (IRT-2 only) |
| `gpr_a_i`, `gpr_b_i` | in | 64 | outputs of the two tapped register flip-flops (IRT-1) |
| `adder_op_a_i`, `adder_op_b_i` | in | 64 | integer adder operands (IRT-2) |
| `lsu_is_store_i` | in | 1 | the access under permission check is a store |
| `ld_st_priv_i` | in | 2 | its privilege (`irt_pkg::priv_lvl_e`: U = 0, S = 1, M = 3) |
| `pte_u_i` | in | 1 | U-bit of the translated PTE |
| `pte_u_o` | out | 1 | U-bit handed to the exception check |
| `trigger_o` | out | 1 | trigger, for observation |

The inputs of the variant that is not built are unused, and lint reports them as such. The
IRT-1 path from the register outputs to `pte_u_o` is combinational. IRT-2 adds one register
on the trigger.

To insert the trojan, cut the PTE U-bit net between the translation and the permission
check, and route it through `pte_u_i` → `pte_u_o`. Then tap the host nets.

Possible hosts beyond the two used here: adders, dividers and multipliers can host IRT-2,
since software influences them but the OS does not restore them. The program counter and
the integer and floating-point registers can host either variant. Other events that last
many cycles could also cover the IRT-1 trigger latency: division, branch mispredictions,
misaligned accesses and TLB flushes.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_trigger_value_matcher`: checks the 128-bit instance against the key, every single-bit
  and many two-bit corruptions, and random values. It also runs a 16-bit instance
  exhaustively.
* `tb_irt1_trigger`: runs 200 save/overwrite/restore cycles with the trigger checked at
  every step, plus one-register and one-bit near misses.
* `tb_irt2_trigger`: runs 20 000 cycles of random traffic, keys and near-miss keys against
  a reference FSM. It also checks the one-clock arm and disarm latency, ON while armed, OFF
  while idle, and reset.
* `tb_irt_payload`: applies every input combination, including what each one means for a
  user store to a kernel page.
* `tb_irt_top`: builds both variants, each attached to `irt_host_model`. That model is a
  cycle-level stand-in for the core and OS, and it is not synthesizable. It time-slices the
  handling process, the kernel (with occasional machine-mode interrupts) and another user
  task, with random quotas. Each store gets a 2–8 cycle page table walk and a RISC-V
  permission check. The attack overwrites 0.5, 1, 4, 16 and 32 KB of kernel memory with
  64-bit stores. The trigger is checked every cycle against the attack state. Every store's
  fault outcome is checked too: kernel stores by the handling process must pass while
  armed, a probe before arming and a probe after disarming must fault, and kernel and task
  stores must be unaffected. The run fails if any of the following never happened:
  preemption while armed, an IRT-1 re-enable on restore, an IRT-2 trigger held through
  another process's slice, or the first store after a resume passing its walk. At 32 KB
  there are about 220 preemptions per attack.
* `tb_irt_top_full`: the default `irt_top` with no parameter overrides, taken through one
  32 KB IRT-1 attack.

To run one, for example the end-to-end test:

```
verilator --binary --timing --assert --top-module tb_irt_top -y rtl -y tb +libext+.sv \
          rtl/irt_pkg.sv tb/tb_irt_top.sv -o sim && ./obj_dir/sim
```

Each testbench finishes in well under a second.

## How far this follows the source description

Taken from the description:
* the two trigger mechanisms and their behaviour across context switches;
* the IRT-2 states, transitions and trigger values;
* 64-bit hosts and 128-bit triggering values;
* the AND→NAND and NAND→NOR patterns as the core of the comparators;
* the hosts (two GPRs, the adder operands, the MMU U-bit);
* the page-table-walk cover for the IRT-1 trigger;
* the attack sizes used in the tests.

Chosen here, because the description is silent:
* all key values (the defaults in `irt_pkg` are arbitrary and must be changed);
* which two registers are tapped;
* the gate fan-ins;
* the exact U-bit rule;
* the registered IRT-2 output and its reset;
* no ALU-valid qualifier on the IRT-2 operands.

Known differences from the reported silicon:
* The reported insertions used 4 (IRT-1) and 6 (IRT-2) sequential cells. What those cells
  hold is not described. This RTL has none in IRT-1 and one in IRT-2.
* The reported 64 combinational cells for IRT-2 are fewer than this RTL's two 49-gate
  comparators. The reported IRT-2 must therefore share or shorten its comparisons in a way
  that is not described.
* Repeaters, the multi-cycle timing exception and the placement in filler space are
  physical design. They have no RTL form.

Not included: the host core, its register file, ALU, MMU and page table walker, and the
software (scheduler, handling process, benchmark). The testbench model stands in for them
only as far as the trojan can observe them.
