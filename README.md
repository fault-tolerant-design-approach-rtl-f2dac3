# FAC: a triple-redundant adder with approximate low bits

Triple modular redundancy (TMR) masks any single fault. It runs three identical
copies of a unit and takes a bitwise majority vote of their outputs. The price is
three copies plus voters, a little over three times the area and power of one unit.

FAC (fault-tolerant design based on approximate computing) keeps the three copies
and the voting, so it keeps the TMR guarantee: any single fault, or any one
completely broken unit, is outvoted. What changes is that each copy is cheaper. Its
output is split by bit significance:

* The **significant part** is computed exactly.
* The **less significant part** is computed by an approximate circuit with far
  less logic.

The approximation error is the same in all three copies. Voting therefore gives the
same approximate value whether or not one copy is faulty. The redundancy still
removes faults; it does not remove the approximation. This suits error-tolerant
data such as images, audio and sensor signals, where a small error in the low bits
cannot be seen.

This repository gives synthesizable SystemVerilog for the reference instance of the
scheme: a **32-bit FAC adder** with a 22-bit accurate carry-lookahead part and a
10-bit approximate part, in three copies, with two bitwise majority voters.

```
             a_i[31:0], b_i[31:0] (same operands to every unit)
         ┌──────────────────────┼───────────────────────┐
   ┌─────▼──────┐         ┌─────▼──────┐          ┌─────▼──────┐
   │ unit 0     │         │ unit 1     │          │ unit 2     │
   │ ┌────────┐ │         │            │          │            │
   │ │CLA 22b │◄┼─T       │  (same)    │          │  (same)    │
   │ └───┬────┘ │ │       │            │          │            │
   │ ┌───┴─────┐│ │       │            │          │            │
   │ │approx 10├┼─┘       │            │          │            │
   │ └─────────┘│         │            │          │            │
   └──A────B*───┘         └──A────B*───┘          └──A────B*───┘
      │    │                 │    │                  │    │
      │    └──────────┬──────┼────┴──────────┬───────┼────┘
      └───────┬───────┼──────┴───────┬───────┼───────┘
          ┌───▼───────┴──────────────▼──┐ ┌──▼───────────┐
          │ majority voter 1 (23 bits)  │ │ voter 2 (10) │
          └──────────────┬──────────────┘ └──────┬───────┘
                        V1 = sum[32:10]          V2* = sum[9:0]
```

## The imprecise adder inside each unit

Each processing unit (`fac_processing_unit`) adds two N-bit operands (N = 32). It
splits them at bit L (L = 10):

**Accurate part, bits N-1..L** (`cla_adder`, 22 bits). This part adds
`a[31:10] + b[31:10] + T` exactly and produces N-L+1 = 23 sum bits, `SUM[32:10]`.
The top bit is the carry out.

**Approximate part, bits L-1..0** (`approx_lsp`, 10 bits). This part produces three
things:

* **The carry T handed to the accurate part.** T is simply `a[9] & b[9]`. The carry
  out of the real 10-bit addition is never computed. This is the key to the speed:
  the accurate part does not wait for any carry chain in the low bits. The
  critical path is one AND gate plus the 22-bit CLA, which is shorter than a full
  32-bit CLA.
* **Sum bits `SUM[9:6]`, the top four bits, from reduced logic.** In this RTL each
  of these bits is `a[i] | b[i]`. That is the exclusive-OR of a half adder replaced
  by an OR, and it is wrong only when both input bits are 1.
* **Sum bits `SUM[5:0]`, constant 1.** A standard-cell flow maps these bits to
  tie-high cells.

Error of the adder, for uniformly random operands (found by counting all 2^20 pairs
of low halves):

* The result differs from exact addition by -511 to +575.
* The mean error is +16 and the mean absolute error is 191, on a scale where one
  unit of the accurate part is 1024.
* The result is exact for about 0.5% of operand pairs.
* The accurate part is never wrong by more than the one carry that T decides.

The source design uses a specific four-bit reduced-logic network for `SUM[9:6]`,
taken from an earlier approximate adder. Its gates are not documented in a form that
could be copied reliably. This RTL's OR-per-bit logic is therefore a stand-in, with
a slightly different error profile. The carry T and the six constant bits do follow
the source design. To try another approximation, change the loop in `approx_lsp.sv`
and `ref_lower` in `tb/fac_ref_pkg.sv`.

## Why FAC masks the same faults as TMR

The two parts of a unit are connected only by T, and T sits inside the unit. A fault
anywhere in one unit corrupts at most that unit's outputs A and B*. This includes a
fault in its approximate logic, its CLA, or its T. Both A and B* are voted, so the
two healthy units outvote it. Voter 2 works exactly as it does in TMR. The only
difference is that the value it agrees on is approximate.

Two faults on the same output bit in two different units are not masked. The
`COPIES` parameter raises the scheme to 5- or 7-way redundancy, which masks
(COPIES-1)/2 faulty units. The voters themselves are assumed fault-free, as is usual
for TMR. If they cannot be trusted, they have to be replicated outside this RTL.

## Modules

| file | module | what it is |
|---|---|---|
| `rtl/fac_pkg.sv` | package | default sizes (N=32, L=10, 4 reduced-logic bits, 3 copies, CLA group 4) and `maj3` |
| `rtl/majority_voter.sv` | `majority_voter #(WIDTH, COPIES)` | bitwise majority: `XY+YZ+XZ` for 3 copies, "more than half" otherwise |
| `rtl/cla_adder.sv` | `cla_adder #(WIDTH=22, GROUP=4)` | accurate two-level carry-lookahead adder with carry in |
| `rtl/approx_lsp.sv` | `approx_lsp #(L=10, LOGIC_BITS=4)` | approximate low part: T, reduced-logic bits, constant-1 bits |
| `rtl/fac_processing_unit.sv` | `fac_processing_unit #(N=32, L=10)` | one imprecise adder: outputs A = SUM[N:L], B* = SUM[L-1:0] |
| `rtl/fac_adder.sv` | `fac_adder #(N=32, L=10, COPIES=3)` | **top**: COPIES units and two voters; `sum_o = {v1_o, v2_o}` |

The top's ports:

* `a_i[N-1:0]` and `b_i[N-1:0]` are the operands.
* `v1_o[N-L:0]` is the voted significant field V1.
* `v2_o[L-1:0]` is the voted approximate field V2*.
* `sum_o[N:0]` is the two fields concatenated.

The whole design is combinational. It has no clock and no reset, and its latency is
zero. Register the inputs or outputs in the surrounding design. The source design
was characterised with one new operand pair every 2 ns (500 MHz).

The CLA's internal structure is this design's own. The source design says only that
it is a carry-lookahead adder. Each bit forms generate and propagate signals. Groups
of four bits form group generate and group propagate. A second level computes every
group's carry directly from the group signals and the carry in. A first level
computes every bit's carry from its group's carry. Both levels are written as flat
sums of products, with no ripple between groups or between bits.

## Notes for synthesis

* **Keep the copies apart.** The three units are logically identical. A synthesis
  tool that flattens the design and merges equivalent logic will quietly reduce
  them to one copy, and then there is no redundancy left to vote. Synthesising
  this RTL flat does exactly that: you get one unit's worth of cells. Preserve the
  `g_pu[*].u_pu` hierarchy (keep-hierarchy or don't-touch constraints) when you
  implement it.
* `SUM[5:0]` of every unit is constant, so six bits of each output field are
  constant after synthesis. Voter 2 then reduces to the four reduced-logic bits.
  This is the intent of the design and not an error.

## Verification

Each module has a self-checking testbench in `tb/`. Expected values come from
`tb/fac_ref_pkg.sv`, an arithmetic model written with integer shifts and adds
rather than gates. Each testbench prints `TB_RESULT checks=N failures=M`.

| testbench | what it covers |
|---|---|
| `tb_majority_voter` | all 2^3 and 2^5 bit patterns, random words, 3- and 5-copy voters |
| `tb_cla_adder` | carry chains through all 22 bits, random operands, a 6-bit instance checked exhaustively |
| `tb_approx_lsp` | all values of the four reduced-logic bit pairs, the constant bits, T, a 5-bit instance checked exhaustively |
| `tb_fac_processing_unit` | A and B* against the model, error below 2^(L+1), T reaching the CLA |
| `tb_fac_adder` | the full-size top, 2000 random operand pairs, one every 2 ns, with fault injection (below) |
| `tb_fac_adder_nmr` | `COPIES = 5`: any two broken units masked, three identical faults get through |
| `tb_fac_image_fft` | the image workload (below) |

`tb_fac_adder` uses `force`/`release` to inject faults, one kind per vector in
rotation:

* one flipped bit in one unit's A;
* one flipped bit in one unit's B*;
* a whole unit replaced by random outputs;
* one unit's internal T inverted. The test checks that this really corrupts the
  unit's own output.

After each of these the voted sum must be fault-free. On a fifth kind of vector the
same bit is flipped in two units, and the testbench checks that this double fault
does reach V1. It also counts how often the approximate low bits differ from exact
addition and how often T is 1. The test fails if any of these events never
happens.

**Image workload.** The FAC adder was meant for image processing: a 2-D FFT of an
8-bit grayscale image followed by the inverse FFT, in integer arithmetic. Only the
additions are approximate; multiplications are exact. `tb_fac_image_fft` does this
at the full 512 x 512 size, with a generated test image. It sends every addition and
subtraction, 28.3 million per round trip, through the `fac_adder` instance. The FFT
itself is testbench code and not part of the design.

The testbench's fixed-point format is its own choice:

* pixels are scaled by 2^21;
* twiddle factors are Q14;
* each forward stage halves its outputs with rounding;
* every sum stays within signed 32 bits, and this is checked.

Results:

* The same round trip with exact additions, standing in for TMR, rebuilds the image
  without a single wrong pixel. This is checked.
* The round trip through the FAC adder reaches about 79 dB PSNR (a few tens of
  wrong pixels out of 262,144). The testbench requires more than 30 dB, the level
  at which the scheme's output quality was judged acceptable.
* With fewer fraction bits (`PIX_SHIFT = 16`) the FAC path falls to about 38 dB.

The PSNR therefore depends as much on the fixed-point format as on the adder. With
the stand-in approximation described above, these figures are not a reproduction of
any published number.

Area, delay and power cannot be judged from RTL. The source design reports them for
a 28-nm library: against a TMR adder built from three 32-bit CLAs, FAC is 15.3%
faster and uses 19.5% less area and 24.7% less power. This RTL has the same 22/10
configuration, but its CLA and its four reduced-logic bits are its own, so its
figures will differ.

## Simulating

Each testbench builds on its own with Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/fac_pkg.sv tb/fac_ref_pkg.sv tb/tb_fac_adder.sv \
    --top-module tb_fac_adder -Mdir build/tb_fac_adder -o sim
./build/tb_fac_adder/sim
```

Replace `tb_fac_adder` with any other testbench name. `tb_fac_image_fft` does not
need `fac_ref_pkg.sv`; it runs in about half a minute. The others take well under a
second. The files use plain IEEE 1800-2017 constructs, and the RTL has no
simulator-specific code.

## Where this RTL departs from the source design

* **`SUM[9:6]`.** These four bits use OR-per-bit logic instead of the original
  reduced-logic network, whose gates are not documented.
* **CLA structure.** The structure (4-bit groups, two-level lookahead) is this
  design's own.
* **Voters.** The voters are single and assumed fault-free.
* **No clocking.** No registers, no reset, no fault-detected flag: none is part of
  the scheme.
* **Accurate part width.** The source text calls the accurate part "22 sum bits".
  It in fact produces 23 bits, N-L+1, with its carry out on top, and the RTL
  follows the 23-bit form.
