# 3-of-M DMMR: a fault-tolerant multiplier with distributed minority and majority voting

N-modular redundancy (NMR) runs N copies of a circuit and takes a majority
vote. It masks (N-1)/2 faulty copies, so every extra tolerated fault costs two
more copies and a wider voter: 5MR tolerates 2 faults, 7MR 3, 9MR 4.

Distributed minority and majority voting redundancy (DMMR) gets the same
numbers with fewer copies. Its M identical *function modules* are split into
two groups:

* the **majority logic group**, modules 1..3, voted 2-of-3 into `MAJ`;
* the **minority logic group**, modules 4..M, combined by a plain OR into `MIN`.

The output is `DMMRO = MAJ & MIN`. Each module added to the minority group adds
one to the fault tolerance. A 3-of-M circuit tolerates M-3 faulty modules, so
3-of-5, 3-of-6 and 3-of-7 stand against 5MR, 7MR and 9MR.

This RTL builds the DMMR circuit around the usual test vehicle for the scheme:
an unsigned 4x4 Braun array multiplier as the function module. The whole
design is combinational.

## Why MAJ AND MIN works, and where it stops working

Every output bit is voted on its own. Call a module *good* at a bit if its
output bit is right there.

* **Correct value 1.** `MAJ` is 1 if at least two of modules 1..3 are good.
  `MIN` is 1 if at least one of modules 4..M is good. Both must hold.
* **Correct value 0.** `MAJ` is 0 if at least two of modules 1..3 are good.
  The AND then forces the output to 0, whatever `MIN` is. Faulty minority
  modules that read 1 are hidden by `MAJ`.

So the output bit is guaranteed right when both of these hold:

1. at most one of modules 1..3 is faulty, and
2. at least one of modules 4..M is good.

That is at most 1 + (M-4) = M-3 faulty modules. But the limit depends on
*where* the faults are. It is not a plain count:

* Two faults in modules 1..3 can corrupt the output even in a 3-of-7.
* All of modules 4..M faulty (reading 0 where the product has a 1) also
  corrupts it. `tb_dmmr_top` shows both cases.
* An NMR voter, in contrast, masks any (N-1)/2 faults wherever they are.

The "M-3 faults" claim holds under this placement condition. Set the fault
model of a system against it before relying on the count.

Because voting is per bit, the condition only has to hold at each bit
position. Modules that are wrong in different bits can add up to more than
M-3 corrupted words and still be masked.

Both worked examples of the scheme are replayed in `tb_dmmr_top`:

* Modules 3 and 5..M stuck at 0, with the correct bit 1: `MAJ` and `MIN` still
  read 1.
* The same modules stuck at 1, with the correct bit 0: `MIN` reads a wrong 1,
  but `MAJ` = 0 hides it.

## Blocks

| file | role |
|---|---|
| `rtl/dmmr_pkg.sv` | shared constants: group size 3, minimum M = 5, multiplier width 4, product width 8, tolerance function |
| `rtl/half_adder.sv`, `rtl/full_adder.sv` | array cells |
| `rtl/braun_multiplier.sv` | the function module, W x W unsigned Braun array (W = 4) |
| `rtl/majority_voter.sv` | `MAJ = F1F2 + F2F3 + F1F3`, per bit |
| `rtl/dmmr_voter.sv` | majority voter, (M-3)-input OR and final AND |
| `rtl/dmmr_top.sv` | M multipliers with shared operands, fault-injection hooks and the DMMR voter |

### The function module: 4x4 Braun array

The partial products are `pp[j][i] = a[i] & b[j]`. Bit `p[0]` is `a0b0`.

1. **Row 1** is three half adders: (A1B0, A0B1), (A2B0, A1B1) and (A3B0, A2B1).
2. **Rows 2 and 3** are carry-save rows of three full adders. Cell `i` of row `j`
   adds three signals:
   * `a[i]b[j]`;
   * the sum of cell `i+1` in the row above (the leftmost cell takes
     `a[3]b[j-1]` instead);
   * the carry of cell `i` in the row above.
3. Cell 0 of each row gives `p[1]`, `p[2]` and `p[3]`.
4. **A ripple row** merges the remaining sums and carries into `p[7:4]`. It is a
   half adder, then a full adder, then a full adder that also takes A3B3. The
   carry out of the last full adder is `p[7]`.

The module is written for any W >= 3, with the same regular structure. The
voters and the top use W = 4 by default.

The cell types and the partial product fed to each cell match the published
4x4 schematic. The sum/carry routing between cells is the standard Braun
arrangement. It is checked exhaustively against `a * b` for 4x4 and 5x5.

### The DMMR voter

`dmmr_voter #(M, WIDTH)` takes the M module outputs as a packed array:
`f[0]` is F1 and `f[M-1]` is FM. It has three outputs:

* `maj` is the 2-of-3 vote of `f[0..2]`;
* `min_or` is the OR of `f[3..M-1]` (the scheme's MIN, renamed so it does not
  read as "minimum");
* `dmmro = maj & min_or`.

Elaboration stops with an error for M < 5. The smallest 3-of-M circuit has two
minority modules.

The voter's gate count grows by one OR input per extra module. A majority
voter for NMR grows much faster with N. This is the source of the area
advantage the scheme claims.

### Top level: `dmmr_top`

| port | dir | width | meaning |
|---|---|---|---|
| `a`, `b` | in | W | operands, fanned out unchanged to every module |
| `fault_en` | in | M x 2W | fault injection: bit set means "replace this module output bit" |
| `fault_val` | in | M x 2W | replacement value for the bits selected by `fault_en` |
| `maj` | out | 2W | intermediate MAJ |
| `min_or` | out | 2W | intermediate MIN |
| `dmmro` | out | 2W | voted product |

Parameters: `M` (default 7, the 3-of-7 circuit) and `W` (default 4).

There are no registers, clock or reset. The outputs settle after one
multiplier delay plus one voter delay: an AND-OR for `MAJ`, a parallel OR for
`MIN`, then one AND.

The fault-injection ports are additions of this RTL; the scheme itself has no
such ports. They let a testbench, or a board, corrupt any bits of any module.
In service, tie `fault_en` to zero. Synthesis then removes the multiplexers
and leaves M multipliers and the voter. If a real deployment has no injection
port, delete the `assign f[k] = ...` multiplexing line.

## Configurations

| circuit | M | modules 4..M | faulty modules masked | how to build |
|---|---|---|---|---|
| 3-of-5 | 5 | 2 | 2 | `dmmr_top #(.M(5))` |
| 3-of-6 | 6 | 3 | 3 | `dmmr_top #(.M(6))` |
| 3-of-7 | 7 | 4 | 4 | `dmmr_top` (default) |

The masked counts assume at most one of the faults lies in modules 1..3.

The description this design follows contradicts itself on the 3-of-6 case:

* in one place it credits the 3-of-6 circuit with tolerating "a maximum of 2"
  faulty modules;
* elsewhere it gives 3, and its equations give M-3 = 3.

The RTL follows the equations. The testbenches confirm 3 for M = 6.

The N-modular baselines (5MR, 7MR, 9MR) are only comparison points and are not
included. The FPGA area and delay figures reported for the scheme are vendor
mapping results, and cannot be reproduced here. For scale, generic synthesis
of `dmmr_top` at M = 7 gives 105 word-level cells, including the injection
multiplexers.

## Testbenches

Each testbench checks itself and ends by printing
`TB_RESULT checks=N failures=F`. Each has a watchdog that counts a failure if
the simulation hangs.

| testbench | what it does |
|---|---|
| `tb_half_adder`, `tb_full_adder` | all input combinations against `a + b (+ cin)` |
| `tb_braun_multiplier` | all operand pairs, 4x4 and 5x5, against `a * b` |
| `tb_majority_voter` | all one-bit patterns, then random words, against a count of ones |
| `tb_dmmr_voter` | M = 5, 6, 7: all 128 one-bit patterns and random words, against a group-counting model of MAJ, MIN and DMMRO |
| `tb_dmmr_top` | default 3-of-7, see below |
| `tb_dmmr_workloads` + `dmmr_campaign` | 3-of-5, 3-of-6 and 3-of-7 side by side, see below |

**`tb_dmmr_top`** tries all 256 operand pairs with each of the 128 subsets of
faulty modules. Faulty modules get a random wrong word, all zeros or all ones,
in turn. For every case it checks:

* `maj`, `min_or` and `dmmro` against an independent model;
* `dmmro == a * b` whenever the placement condition holds.

It also replays the two worked examples. It counts each mechanism and fails if
any never occurs:

* fault-free operation;
* masked majority-group faults;
* masked minority-group faults;
* masking of the full M-3 faults;
* a wrong MIN hidden by MAJ;
* a wrong output beyond the tolerance.

**`tb_dmmr_workloads`** applies 2000 random patterns to each circuit, and every
one must be masked. Three quarters of them have exactly M-3 faults: one in
modules 1..3 and all but one of modules 4..M. The rest leave modules 1..3
intact. It also applies one pattern beyond the tolerance that must
lose the product.

To run a testbench with plain Verilator from the repository root:

```
verilator --binary --timing --assert -Wall -Wno-fatal \
  rtl/dmmr_pkg.sv rtl/half_adder.sv rtl/full_adder.sv rtl/majority_voter.sv \
  rtl/braun_multiplier.sv rtl/dmmr_voter.sv rtl/dmmr_top.sv \
  tb/tb_dmmr_top.sv --top-module tb_dmmr_top -Mdir obj_tb
./obj_tb/Vtb_dmmr_top
```

For the workload test, add `tb/dmmr_campaign.sv tb/tb_dmmr_workloads.sv` and
use `--top-module tb_dmmr_workloads`. Every test finishes in well under a
second.

## What follows the published scheme and what is this design's own

**Follows the scheme:**

* the split into a 3-module majority group and an (M-3)-module minority group;
* the MAJ, MIN and DMMRO equations;
* the 2-of-3 voter as three ANDs into an OR;
* identical operands to every module;
* the 4x4 Braun multiplier, its cell types and partial-product placement;
* the sizes M = 5, 6, 7;
* the minimum M = 5.

**This design's own choices:**

* **Per-bit voting.** One voter for each of the 8 product bits.
* **Cell-to-cell routing.** The standard Braun routing, which the schematic's
  drawing does not spell out.
* **Generic W.** The multiplier is written for any W >= 3.
* **Fault injection.** The `fault_en` / `fault_val` ports.
* **Default M = 7.** The scheme presents three sizes equally; this design
  picks the largest.
* **Combinational only.** There are no pipeline registers.
* **Port name.** MIN is exposed as `min_or`.
