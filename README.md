# ASAP: proofs of execution that allow interrupts

A *proof of execution* (PoX) lets a remote verifier check that a small
microcontroller really ran one piece of code, the *executable region* ER, from
its first instruction to its last, and that the outputs the code left in the
*output region* OR came from that run. The proof is a single bit, EXEC, that
only hardware can set and clear. Remote attestation later signs EXEC together
with ER, OR and a fresh challenge from the verifier. A signed EXEC = 1 then
means "this code ran, unmodified, and produced these outputs after your
challenge was received".

Earlier PoX hardware for tiny MCUs treats every interrupt during the run as an
attack and clears EXEC. That rules out any task that must react to a timer,
a button or a network packet while it runs. ASAP removes the restriction with
one observation. If the trusted interrupt service routines (ISRs) are linked
*inside* ER, the hardware no longer needs to watch interrupts at all. It only
has to watch the program counter:

* an interrupt whose ISR lies inside ER keeps the PC inside ER, so EXEC stays 1;
* an interrupt whose ISR lies outside ER makes the PC leave ER somewhere other
  than its last instruction. That is already an atomicity violation, so EXEC
  drops.

Two more things make this safe. The ISRs are part of ER, so the existing "ER
may not be modified" rule protects them too. The interrupt vector table (IVT)
decides which code each interrupt reaches, so it gets a monitor of its own: any
write to it clears EXEC. The verifier then receives the IVT in the attested
memory and can check that every vector pointing into ER lands on the entry of an
intended ISR.

This repository gives synthesizable SystemVerilog for the EXEC-producing
hardware of that scheme, for a 16-bit MSP430-class core. It does not include
the CPU, the memories or the remote-attestation hardware that protects the
signing key.

## The rules behind EXEC

EXEC is the AND of six independent monitors. Each reduces one rule to a
per-cycle `violation` bit:

| monitor | violation in a cycle | why |
|---|---|---|
| `er_atomicity_monitor` | previous PC in ER, present PC outside ER, and previous PC was not ER_MAX; **or** previous PC outside ER, present PC inside ER, and present PC is not ER_MIN | ER runs whole: entered only at its first instruction, left only from its last. This rule is what separates trusted from untrusted interrupts. |
| `er_immutability_monitor` | CPU write to ER, or DMA access to ER | the code, and the ISRs linked into it, may not change between the run and attestation |
| `or_protection_monitor` | CPU write to OR while the PC is outside ER, or DMA access to OR | only ER's own code may produce the outputs |
| `dma_monitor` | DMA access while the PC is inside ER | nothing but ER may change memory during the run |
| `ivt_immutability_monitor` | CPU write to 0xFFE0..0xFFFF, or DMA access to it | the vector table that was in force during the run is the one that gets attested |
| `meta_monitor` | CPU write or DMA access to the metadata block | the challenge and the ER/OR bounds that EXEC refers to may not change afterwards |

There is deliberately **no** rule on the interrupt request line. The bus
carries `irq`, but nothing reads it.

ER and OR are inclusive byte-address ranges `[ER_MIN, ER_MAX]` and
`[OR_MIN, OR_MAX]`, both set by software. ER_MAX is the address of the last
instruction, the one that returns from the proven code.

## One state machine, six times

Every monitor wraps the same two-state machine, `exec_fsm`:

```
          violation
   Run  ------------->  NotExec
   ^                      |
   +----------------------+
     PC == ER_MIN and no violation
   (otherwise: stay)
```

Reset enters NotExec. The machine's vote is

    exec = (state == Run) && !violation

This Mealy output is the part that is easiest to get wrong, so here is what it
means cycle by cycle:

* **A violation clears EXEC in the same cycle** in which the offending PC,
  write or DMA access is on the bus. There is no window in which a tampered
  state still reads as proven. For the atomicity rule, the "next PC" of the
  formal property is the PC in the present cycle, compared with one bit of
  history ("was the previous PC in ER, was it ER_MAX") held in two flip-flops.
* **Re-arming takes one cycle.** In the cycle the PC is at ER_MIN, a machine in
  NotExec still votes 0. It votes 1 from the next cycle, as long as no
  violation is present in the ER_MIN cycle itself.
* **Each monitor re-arms on its own.** Any write to the metadata, including the
  setup before a run, leaves `meta_monitor` in NotExec. The same holds for
  `ivt_immutability_monitor` after software installs a vector. Every machine
  returns to Run at the next ER_MIN, so a clean run always ends with EXEC = 1.
* **Reaching ER_MAX after a violation does not help.** Only ER_MIN re-arms.
* **A new run can start while EXEC is still 1** from an earlier clean run. EXEC
  then simply stays 1 if the new run is also clean. Attestation is code outside
  ER, so it can only run after ER was left. If that exit was not through
  ER_MAX, EXEC is already 0.

A proven run with a trusted interrupt looks like this on the bus
(`tb_asap_hwmod` plays exactly this, with ER = 0xE19E..0xE1E0):

| cycle | PC | bus activity | EXEC |
|---|---|---|---|
| setup | 0x4400 | writes challenge, bounds, IVT entry | 0 |
| t | 0xE19E = ER_MIN | | 0 (re-arming) |
| t+1 .. | 0xE1A4..0xE1AA | 32 writes to OR from inside ER | 1 |
| | 0xE1AC | irq raised | 1 |
| | 0xE1B0 | trusted ISR, inside ER, writes a GPIO | 1 |
| | 0xE1E0 = ER_MAX | | 1 |
| | 0x4400 | legal exit | 1 |
| later | 0xA000 | attestation reads metadata and EXEC | 1 |

If the ISR is at 0xE0D6 instead, outside ER, EXEC is 0 in the first cycle with
PC = 0xE0D6 and stays 0 until the next ER_MIN.

## Metadata map

`meta_regs` is a memory-mapped block of 16-bit words. All addresses are
parameters (`META_BASE`, `CHAL_BYTES`). The defaults are:

| address | content | access |
|---|---|---|
| 0x0140 .. 0x015F | challenge, 32 bytes | read/write |
| 0x0160 | ER_MIN | read/write |
| 0x0162 | ER_MAX | read/write |
| 0x0164 | OR_MIN | read/write |
| 0x0166 | OR_MAX | read/write |
| 0x0168 | EXEC in bit 0 | read only; a write is ignored (and clears EXEC through `meta_monitor`) |

Writes take whole words; address bit 0 is ignored. Read data appears on
`r_data` one cycle after `r_en`, and is 0 for addresses outside the block. All
registers reset to 0. The IVT is fixed at 0xFFE0..0xFFFF, where the MSP430
places it (`IVT_MIN`, `IVT_MAX`).

## Software side

The hardware only works if the program is laid out to match it. The linker
places three sections at the start, middle and end of ER: an entry stub at
ER_MIN that calls the task, the task itself together with every trusted ISR,
and a one-instruction exit stub (a return) at ER_MAX. The task ends by
branching to the exit stub. Any ISR that is not part of the proven behaviour is
linked elsewhere. The IVT entries for the trusted ISRs point into ER. Before
jumping to ER_MIN, software stores the verifier's challenge and the four
bounds. After the exit, the attestation routine measures ER, OR, the IVT, the
metadata and EXEC.

## Files

| file | what it is |
|---|---|
| `rtl/asap_pkg.sv` | bus struct `mcu_bus_t`, state enum, default addresses, range function |
| `rtl/exec_fsm.sv` | the Run/NotExec machine |
| `rtl/er_atomicity_monitor.sv` | enter-at-ER_MIN / leave-from-ER_MAX rule |
| `rtl/er_immutability_monitor.sv` | no writes or DMA to ER |
| `rtl/or_protection_monitor.sv` | OR written only from inside ER, no DMA |
| `rtl/dma_monitor.sv` | no DMA during the run |
| `rtl/ivt_immutability_monitor.sv` | no writes or DMA to the IVT |
| `rtl/meta_monitor.sv` | no writes or DMA to the metadata |
| `rtl/meta_regs.sv` | the metadata registers |
| `rtl/asap_hwmod.sv` | top: registers, six monitors, EXEC = AND of the votes |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

The top's ports are `clk`, `rst_n` (synchronous, active low), `bus`
(`mcu_bus_t`: `pc`, `irq`, `r_en`, `w_en`, `d_addr`, `d_wdata`, `dma_en`,
`dma_addr`, all for the present cycle), and the outputs `exec`, `r_data`,
`er_min`, `er_max`, `or_min`, `or_max` and `chal`. The monitors are purely
observers: they never stall or redirect the CPU. With default parameters the
top synthesizes to about 200 word-level cells, 88 flip-flops and 256 bits of
register array (the challenge). Of the flip-flops, 64 are the four bounds and 16
the read-data register. Each monitor has one state flip-flop, and the atomicity
monitor has two more for its PC history.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog ends a hung run with a failure. With Verilator 5:

```
verilator --binary --timing --assert rtl/asap_pkg.sv \
    $(ls rtl/*.sv | grep -v asap_pkg) tb/tb_asap_hwmod.sv \
    --top-module tb_asap_hwmod -o sim
./obj_dir/sim
```

Replace `tb_asap_hwmod` with any other testbench name. `-Wall` shows only
unused-bit warnings: each monitor takes the whole bus struct but reads just
part of it.

* `tb_asap_hwmod` runs the top at its default parameters. It covers setup, a
  proven run with a trusted interrupt, and attestation reads. It then makes one
  run for each way of breaking the proof: an untrusted ISR outside ER, IVT
  writes by the CPU and by DMA, an overwritten ISR, DMA during the run, an OR
  write from outside ER, DMA to OR, an overwritten challenge, a write to the
  EXEC word, and a jump into the middle of ER. It finishes with a clean run to
  show recovery. It checks EXEC every cycle, including the one-cycle re-arm and
  the same-cycle drop. It counts every mechanism and fails if any of them
  never happened.
* The monitor testbenches each run 20 000 cycles of random bus traffic, biased
  towards the bounds of ER, OR, the IVT and the metadata. They compare the
  vote every cycle with a reference model of the rule written in the testbench.
* `tb_asap_waveforms` replays the two published interrupt experiments at their
  own ER bounds and PC values: the trusted ISR at 0xE1B0 with ER =
  0xE19E..0xE1E0, and the untrusted ISR at 0xE0D6 with ER = 0xE1C6..0xE1E0.
* `tb_meta_regs` keeps a reference copy of all 21 words. It checks every read,
  the bound outputs and the packed challenge, and that the EXEC word cannot be
  written.

Assertions in `exec_fsm` check, in every simulation, that a violation never
leaves EXEC high.

## How far to trust it, and where it departs from the published design

The security rules are the published ones. So are the IVT range and the
Run/NotExec machine for the IVT. The atomicity rule follows the published
formal properties literally, and the trusted-ISR and untrusted-ISR behaviour
matches the published waveforms at their printed PC values. The published
design was model-checked. This RTL was not: it has been checked only by the
simulations above.

Choices made here, where the source leaves the point open:

* **Circuit of the APEX-inherited monitors.** Only the IVT machine is published
  as a state machine. The other five reuse it. The original implementation may
  split the rules differently among its machines. It also has one more rule,
  that an interrupt during the run clears EXEC, which ASAP removes and which is
  not built here.
* **Same-cycle clearing and one-cycle re-arming**, as described above.
* **DMA accesses of either direction count.** The bus carries no DMA
  direction. The formal IVT rule is written on the DMA enable alone, though
  the prose speaks of DMA writes.
* **"During the run" means "PC inside ER"** for the DMA rule.
* **The metadata rule (`meta_monitor`) is an addition.** It follows from what
  EXEC has to mean, but the source does not state it. Remove it from the AND in
  `asap_hwmod` if software must be able to move the bounds after a run.
* **Metadata map, challenge size, word-only writes, registered reads and reset
  values** are all choices of this design.

Not included:

* **The CPU.** The published prototype uses OpenMSP430.
* **The memories.**
* **The remote-attestation hardware.** In the published architecture it shares
  the monitor bus, protects the signing key, keeps the attestation routine
  atomic, and resets the core on a violation. This RTL has no reset output.
  Anyone integrating it must add that hardware to get the full guarantee: EXEC
  alone says nothing about who can read the key.
* **The FPGA resource comparison.** The published figure says ASAP needs 24
  fewer LUTs and 3 fewer registers than its predecessor. It measured a
  different partitioning and is not reproduced here.
