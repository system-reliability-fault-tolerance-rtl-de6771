# Distributed minority and majority voting redundancy (DMMR), 5-of-7, in SystemVerilog

Classic N-modular redundancy (NMR) runs N copies of a circuit and takes a
majority vote of their outputs. To survive f faulty copies it needs
N = 2f + 1 copies and a wide voter, so it gets expensive fast. DMMR splits the
copies into two groups and votes them differently:

* a small **majority logic group** of K copies (K = 3 or 5), voted by an
  ordinary K-input majority voter, giving **MAJ**;
* a **minority logic group** of the remaining M − K copies, combined by a
  bitwise OR, giving **MIN**;
* the system output is **y = MAJ & MIN**, bit by bit.

The output is correct whenever a majority of the majority group works *and* at
least one copy in the minority group works. A 5-of-7 DMMR system survives any
3 faulty copies, as 7MR does, but its voter is a 3-of-5 majority gate plus an
OR and an AND instead of a 4-of-7 majority gate. This RTL builds that system
with a 4×4 unsigned array multiplier as the replicated function module. The
default configuration is 5-of-7. Other K-of-M systems (5-of-8, 3-of-6, 3-of-7)
are obtained by changing two parameters.

The design is purely combinational. It has no clock, no reset and no
registers.

## Why MAJ & MIN gives the right answer

This is the least obvious part of the design. Take one output bit whose correct
value is v, and assume a majority of the majority group is fault-free, so that
MAJ = v.

* **v = 0.** MAJ = 0, so y = 0 whatever the minority group says. The minority
  group plays no part. Even a minority group where every copy is faulty cannot
  force a wrong 1.
* **v = 1.** MAJ = 1, so y = MIN. MIN is the OR of the minority copies, so a
  single fault-free minority copy (which outputs 1) is enough to make y = 1.
  Faulty minority copies that output 0 are ignored.

So the majority group protects the bits that should be 0, and a single working
minority copy protects the bits that should be 1. The output is wrong only if
the majority group is outvoted, or if every minority copy is faulty on a bit
that should be 1. The AND-OR rule is asymmetric: a fault that only pulls
outputs high never harms the minority group. The reliability figures below use
the worst case, in which a faulty copy may output anything.

Consequences a user should know:

* There is no fault *detection* and no indication of which copy failed. The
  voter only masks faults.
* K must be odd and at least 3, and K < M. Assertions in the voters check
  this at the start of simulation.
* Voting is bitwise. Each of the 8 product bits is voted on its own, which is
  the usual reading of "voting the module outputs" for multi-bit modules.

## Fault tolerance and reliability of the configurations

Let R be the probability that one copy works. The system reliability is
Σ c_f · R^(M−f) · (1−R)^f, where c_f is the number of sets of f faulty copies
that the system tolerates. The testbenches measure c_f directly on the RTL.
For every set of faulty copies, they force each faulty copy's output to the
complement of the correct product and apply all 256 operand pairs. A set
counts as tolerated only if every product comes out right.

| system  | K | M | tolerated sets c_0..c_4 | most faulty copies survived | R_S at R = 0.9 |
|---------|---|---|-------------------------|-----------------------------|----------------|
| 5-of-7  | 5 | 7 | 1, 7, 20, 20, 0         | 3                           | 0.9815256      |
| 5-of-8  | 5 | 8 | 1, 8, 28, 45, 30        | 4                           | 0.99044856     |
| 3-of-6  | 3 | 6 | 1, 6, 12, 9, 0          | 3                           | 0.971028       |
| 3-of-7  | 3 | 7 | 1, 7, 18, 22, 12        | 4                           | 0.9719028      |

The counts and reliabilities in the table are what the simulations measure.
For 5-of-7 and 5-of-8 they agree exactly with the published closed-form
reliability expressions. For all four systems, the reliabilities agree with the
published values at R = 0.9. The 3-of-M counts follow from the correctness
condition; they were worked out by hand and the simulation confirms them. For comparison, 7MR and 9MR reach 0.997272 and 0.99910908 at
R = 0.9, but they need 7 and 9 copies and a 4-of-7 or 5-of-9 voter. The NMR
systems are not part of this RTL.

The reported ASIC implementations (a 32/28 nm standard-cell library, with
vectors applied every 4 ns) showed the 5-of-M systems between NMR and 3-of-M
DMMR in power, delay and area. For example, the 5-of-7 system used 730.92 µm²
against 865.11 µm² for 7MR. Those numbers depend on the cell library and
cannot be reproduced from this RTL.

## The blocks

| file | module | what it is |
|------|--------|------------|
| `rtl/dmmr_pkg.sv` | package | operand width (4), product width (8), default K = 5 and M = 7, operand and product types |
| `rtl/full_adder.sv` | `full_adder` | one-bit full adder cell |
| `rtl/array_multiplier.sv` | `array_multiplier` | the function module: N×N unsigned Braun array multiplier, N = 4 |
| `rtl/majority_voter.sv` | `majority_voter` | bitwise N-input majority (2-of-3 for N = 3, 3-of-5 for N = 5, the default) |
| `rtl/dmmr_voter.sv` | `dmmr_voter` | majority voter on the majority group, OR on the minority group, AND of the two |
| `rtl/dmmr_system.sv` | `dmmr_system` | top: M multipliers with shared inputs, grouped and voted |

Top-level ports of `dmmr_system`:

| port | dir | width | meaning |
|------|-----|-------|---------|
| `a`  | in  | N = 4 | multiplicand, fed to every copy |
| `b`  | in  | N = 4 | multiplier, fed to every copy |
| `y`  | out | 2N = 8 | voted product |

Parameters: `K` is the majority-group size (default 5), `M` the total number
of copies (default 7), and `N` the multiplier operand width (default 4).
Copies 1..K, which are `f[0]..f[K-1]` inside the top, form the majority group.
Copies K+1..M form the minority group. The internal nets `maj` and `min` hold
MAJ and MIN for observation.

**Array multiplier.** Partial-product bit a[j]·b[i] has weight i+j. Row 0 holds
the partial products of b[0]. Each of rows 1..N−1 is a line of N full adders
in carry-save form, and each row delivers one low product bit. An (N−1)-cell
ripple-carry row, followed by an XOR for the top bit, merges the remaining
sums and carries into the upper N bits. The critical path runs through N−1
carry-save rows and the ripple row.

**Synthesis note.** The M copies are identical, and a flattening synthesis run
may merge them into one and remove the redundancy. `array_multiplier`
therefore carries the `keep_hierarchy` attribute. With other tools, keep each
copy's hierarchy, or mark the copies `dont_touch`, in the same way.

## What is original and what is this implementation's choice

The following come from the DMMR scheme as published: the two-group topology,
the majority voters (2-of-3 and 3-of-5), the correctness condition, the choice
of a 4×4 array multiplier as function module, and the configurations and their
reliabilities.

The following are choices made for this implementation:

* **MIN = OR, final element = AND.** The published block diagram draws these
  two elements without naming them, and the text gives only the correctness
  condition. OR and AND are the simplest functions that meet that condition.
  They also reproduce the published reliability expressions exactly, which the
  tests check.
* **Multiplier structure.** The source takes the 4×4 array multiplier from
  earlier work without showing its cells. A textbook Braun array is used here.
  Operands are unsigned.
* **Voter structure.** The majority voter is written as a per-bit count
  compared with N/2. Synthesis reduces this to the majority function. The gate
  netlist may differ from the voter circuits used in the original work.
* **No clock, reset or fault-injection port.** The published system shows
  none. It is characterised by a critical-path delay, that is, as
  combinational logic. Simulations inject faults by forcing `f[i]`
  inside the top.
* **Default 5-of-7.** Of the 5-of-M systems studied, 5-of-7 is the smaller
  one. Use `M = 8` for 5-of-8, or `K = 3` for the 3-of-M topology.

## Verification

| testbench | what it checks |
|-----------|----------------|
| `tb/tb_array_multiplier.sv` | all 256 products of the 4×4 multiplier; 500 random products of a 6×6 instance |
| `tb/tb_majority_voter.sv` | 3-of-5 and 2-of-3, every input pattern on one bit plus random words, against a count-based reference |
| `tb/tb_dmmr_voter.sv` | 5-of-7 and 3-of-6 voters against a reference model; 4000 random fault sets with random wrong words where the correctness condition holds |
| `tb/tb_dmmr_system.sv` | default 5-of-7 system end to end: fault-free products; all 128 fault sets × 256 operand pairs against the correctness condition; tolerated-set counts and reliability at R = 0.8, 0.9 and 0.95 against the closed form; 20 000 random faults with random wrong words; counts that each mechanism occurred (a majority-group fault masked, a minority-group fault masked, the majority group outvoted, the whole minority group lost) |
| `tb/tb_dmmr_workloads.sv` | 5-of-8, 3-of-6 and 3-of-7 systems through the helper `tb/dmmr_fault_sweep.sv`: measured verdicts, number of faults survived, tolerated-set counts and reliabilities at R = 0.9 |

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and has a
watchdog. Each one runs in well under a second. Because the design is
combinational, the latency checked is zero cycles: outputs are sampled 1 ns
after the inputs change.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/dmmr_pkg.sv \
    tb/tb_dmmr_system.sv --top-module tb_dmmr_system
./obj_dir/Vtb_dmmr_system
```

Replace the testbench name to run another one. Lint with
`verilator --lint-only -Wall -Irtl rtl/dmmr_pkg.sv rtl/dmmr_system.sv`. It
leaves only notices that the observation nets `maj` and `min` are unused.

## Changing the design

* **Another function module.** Replace the `array_multiplier` instance in
  `dmmr_system` and set its local `W` to the module's output width. The voters are
  generic in `W`.
* **Another configuration.** Override `K` (odd, at least 3) and `M` (above K).
  The voter sizes follow.
* **Fault experiments.** Force `dut.f[i]` from a testbench, as
  `tb_dmmr_system` and `dmmr_fault_sweep` do.
