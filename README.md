# Majority and minority voted redundancy (K-MMR) in SystemVerilog

Classic N-modular redundancy (NMR) copies a function unit N times and takes a
majority vote over all N outputs. To survive one more faulty unit, NMR needs two
more units, and its voter grows fast (a 9-input majority is a large gate).

Majority and minority voted redundancy (MMR) gets the same fault tolerance with
fewer units and a voter that stays small. A K-MMR circuit has K identical units,
split into two groups:

* the **majority cluster**: units 1, 2 and 3, always three;
* the **minority cluster**: units 4..K, as many as the tolerance calls for.

The circuit gives the right answer as long as **at least two of the three
majority units** and **at least one of the K-3 minority units** are correct. So
a K-MMR tolerates K-3 faulty units. A 5-, 6- and 7-MMR tolerate 2, 3 and 4
faults, the same as 5-, 7- and 9-way NMR, with 5, 6 and 7 units instead of
5, 7 and 9.

This repository holds synthesizable RTL for the MMR voter and for the two
example circuits the scheme is usually shown with: K-MMR built from 4-bit ripple
carry adders and from 4x4 array multipliers. It also holds self-checking
testbenches that inject unit faults.

## The voter

For one output bit, with F1..FK the unit outputs:

```
Maj = majority(F1, F2, F3)            -- 3-input majority (AO222 gate)
P   = F4 & F5 & ... & FK              -- (K-3)-input AND
Q   = F4 | F5 | ... | FK              -- (K-3)-input OR
Min = Maj ? Q : P                     -- 2:1 MUX, select = Maj
MO  = Maj & Min                       -- circuit output
```

### Why this works

The majority cluster decides the value. If at most one of F1..F3 is wrong,
`Maj` is the correct value. The minority cluster confirms it.

* **Correct value 0.** `Maj = 0`, so `MO = 0` whatever the minority cluster says.
  (The MUX selects P, the AND. With at least one correct minority unit at 0,
  P is 0 too. So `Min` also agrees.)
* **Correct value 1.** `Maj = 1`, and the MUX selects Q, the OR. One correct
  minority unit at 1 is enough to make Q = 1, so `MO = 1`.

The rule "at least one minority unit is correct" is a *minority* condition: it
asks for just one vote. On its own it is ambiguous. If F4 = 0 and F5 = 1, both 0
and 1 have "at least one" vote. That is why `Min` cannot be the reference and
the majority output selects which reading of the minority cluster to use. With
`Maj = 0`, the AND reports 0 as soon as any minority unit says 0. With
`Maj = 1`, the OR reports 1 as soon as any minority unit says 1.

The final AND means the circuit is not symmetric in 0 and 1. Suppose the
tolerance is exceeded. A correct 1 can turn into a wrong 0, for example when two
majority units fail to 0, or all minority units fail to 0. A correct 0 becomes a
wrong 1 only if two majority units say 1 *and* at least one minority unit says 1.

### Multi-bit units

The voter works bit by bit. `mmr_voter` takes a parameter `W` and puts a
separate voter slice on each output bit. This stays within the tolerance
argument: if a unit counts as faulty, every bit it gets wrong comes from one of
the at most K-3 faulty units.

### Reliability

Let each unit have reliability R. Assume the voter is perfect. Then the circuit
works with probability

```
sum over n = 3..K of  C_K(n) * R^n * (1-R)^(K-n)
```

where `C_K(n)` counts the sets of n working units that meet both cluster
conditions. For K = 5, 6 and 7 this gives:

```
5-MMR: 6R^3(1-R)^2 + 5R^4(1-R) + R^5
6-MMR: 9R^3(1-R)^3 + 12R^4(1-R)^2 + 6R^5(1-R) + R^6
7-MMR: 12R^3(1-R)^4 + 22R^4(1-R)^3 + 18R^5(1-R)^2 + 7R^6(1-R) + R^7
```

The voter testbench checks these coefficients against the RTL. It applies every
fault pattern and counts the patterns the voter survives.

## The example function units

Both units take two 4-bit operands. Every unit of a K-MMR gets the same
operands.

* **`rca4`**: a 4-bit ripple carry adder made of four `full_adder` cells, with a
  carry-in. The unit's output word is `{cout, sum}`, 5 bits. So the adder
  circuit has 512 distinct input vectors.
* **`bam4x4`**: an unsigned 4x4 array multiplier with an 8-bit product.
  1. AND gates form the 16 partial-product bits `a[j] & b[i]`.
  2. Row 0 is the first running sum.
  3. Rows 1..3 each add the next partial-product row to the running sum, shifted
     right by one. Each row is a ripple of four full adders.
  4. The low bit of each row is one product bit. After the last row, the running
     sum gives `p[7:4]`.

## Module hierarchy

```
mmr_top                 K-MMR of adders and K-MMR of multipliers, side by side
 +- mmr_k (FU_RCA4)     K function units + voter
 |   +- rca4 x K        +- full_adder x 4
 |   +- mmr_voter       +- maj3
 +- mmr_k (FU_BAM4X4)
     +- bam4x4 x K      +- full_adder x 12
     +- mmr_voter       +- maj3
mmr_pkg                 K_DEFAULT, widths, fu_kind_e, fu_in_t
```

| module | parameters (default) | ports |
|---|---|---|
| `maj3` | `W` (1) | `a, b, c` in; `y` out |
| `mmr_voter` | `K` (5), `W` (1) | `f[K-1:0][W-1:0]` in (`f[0]` is F1); `maj, p, q, min_o, mo` out |
| `rca4` | none | `a[3:0], b[3:0], cin` in; `sum[3:0], cout` out |
| `bam4x4` | none | `a[3:0], b[3:0]` in; `p[7:0]` out |
| `mmr_k` | `K` (5), `FU` (`FU_RCA4`) | `in` (`fu_in_t`: `a, b, cin`); `mo, maj, min_o` out, 5 or 8 bits |
| `mmr_top` | `K` (5) | `a, b, cin` in; `rca_mo/maj/min` (5 bits) and `bam_mo/maj/min` (8 bits) out |

`K` must be at least 4. Elaboration stops with an error for smaller values.

To build another MMR circuit, you can:

* use `mmr_voter` directly with your own units;
* add a kind to `fu_kind_e` and a generate branch in `mmr_k`.

### Timing

Everything is combinational. There are no clocks, resets or registers.

* `MO` is valid one function-unit delay plus one voter delay after the operands
  change.
* The voter's depth does not depend on K, except for the AND/OR trees over the
  minority cluster. A synthesis tool may decompose these as it likes. This is
  why the MMR delay stays flat as K grows, while an NMR voter keeps getting
  deeper.
* The testbenches apply one vector every 2.5 ns, which is 400 MHz. Zero-delay
  simulation does not check settle time.

## Where this RTL makes its own choices

The voter structure and the cluster split follow the MMR scheme exactly. The
following points are choices made here:

* The voter applies bit by bit to multi-bit units (the `W` parameter).
* `K` defaults to 5. 6 and 7 are the other usual configurations; set them with
  the parameter.
* The adder has a carry-in.
* The multiplier is the plain row-ripple array and treats operands as unsigned.
* `mmr_top` puts the adder circuit and the multiplier circuit side by side, with
  shared `a` and `b` inputs. The two are independent circuits and share nothing
  else.
* `P`, `Q`, `Maj` and `Min` are brought out as ports for observation.
* Each unit's output in `mmr_k` is a named net, `g_fu[i].y`, so that a
  testbench can force a unit fault on it. It has no other role.
* Nothing here models the standard-cell implementation: no area, power or delay
  figures. NMR baselines are not included either.

## Verification

Every testbench is self-checking. Each one ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it covers |
|---|---|
| `tb_rca4` | all 512 `(a, b, cin)` vectors against `a + b + cin` |
| `tb_bam4x4` | all 256 operand pairs against `a * b` |
| `tb_maj3` | all 8 input patterns, plus random 8-bit words |
| `tb_mmr_voter` | K = 4..7, all 2^K inputs (see below) |
| `tb_mmr_k` | the 5-MMR adder and the 6-MMR multiplier (see below) |
| `tb_mmr_top` | end-to-end at default size (see below) |
| `tb_mmr_sweep` | 6-MMR and 7-MMR of both units (see below) |

**`tb_mmr_voter`** uses K = 4..7 and applies all 2^K input patterns. It checks:

* Maj, P, Q, Min and MO, each against its own definition;
* the fault-tolerance claim for every tolerable fault pattern;
* the reliability coefficients above;
* the scenario rows (perfect clusters, majority cluster outputs 0, majority
  cluster outputs 1);
* an 8-bit voter with random faults.

**`tb_mmr_k`** tests the 5-MMR adder and the 6-MMR multiplier.

* Every vector runs fault-free, then with random tolerable faults.
* One case goes beyond the tolerance. MO must then follow the wrong value, which
  shows that the injected faults reach the voter.

**`tb_mmr_top`** runs end to end at the default size. Each of the 512 vectors
runs under four conditions:

* clean;
* one majority-cluster fault;
* minority-cluster faults;
* the maximum K-3 faults.

It counts, bit by bit, three voter situations and requires each to occur:

* a masked majority disagreement;
* Min taking P while P ≠ Q;
* Min taking Q while P ≠ Q.

**`tb_mmr_sweep`** runs the 6-MMR and 7-MMR of both units, over all vectors,
with 3 and 4 faulty units respectively.

**How faults are injected.** A faulty unit is modelled by forcing its output
net to the correct word XOR a random non-zero mask. This is the most hostile
fault a unit can have: every bit it flips is wrong, and the flipped bits differ
from unit to unit. The testbenches release all forces before they load new
fault values. Only then do they force the next pattern.

### Running with Verilator

The testbenches use `timeunit 1ns`. The RTL declares no time unit, so pass a
default:

```
verilator --binary --timing --timescale 1ns/1ps -y rtl -y tb \
    rtl/mmr_pkg.sv tb/tb_mmr_top.sv --top-module tb_mmr_top
./obj_dir/Vtb_mmr_top
```

To run another bench, replace `tb_mmr_top` with its name. Every bench finishes
in well under a second. To lint a module:

```
verilator --lint-only -Wall -y rtl rtl/mmr_pkg.sv rtl/mmr_top.sv
```

Verilator reports the unused package constants as warnings.
