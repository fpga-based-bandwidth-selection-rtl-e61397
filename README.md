# Plug-in bandwidth selection for kernel density estimation, in fixed-point hardware

A kernel density estimate is only as good as its bandwidth *h*. This design computes the
asymptotically optimal bandwidth of a univariate Gaussian kernel density estimate with the
plug-in method (in the formulation of Wand and Jones, often called PLUGIN). The data set is
loaded into on-chip memory and *h* is returned as a Q32.32 fixed-point number. The arithmetic
is cheap except for two functionals, Ψ6 and Ψ4. Each is a double sum of a kernel derivative
over all pairs of samples, so the work grows as O(n²). The design is built around a
pipelined, unrolled engine for those two sums. A sequential datapath, sharing one
reciprocal and one CORDIC unit, does everything else.

The RSLT/A/op interface, the division into step units, the number format and the arithmetic
methods follow the FPGA implementation described in *"FPGA-Based Bandwidth Selection for
Kernel Density Estimation Using High Level Synthesis Approach"* (A. Gramacki, M. Sawerwain,
J. Gramacki). That design was written in C++ and synthesised with a high-level-synthesis
tool. This is a hand-written RTL version of its fastest variant ("fast": pipelined kernel
routines with a dedicated exponential, unrolled twice). Section 8 lists where it
differs.

## 1. The computation

For samples X₁…Xₙ and the Gaussian kernel, *h* comes from seven strictly sequential steps:

| step | quantity | formula |
|---|---|---|
| I   | V̂, σ̂ | V̂ = (ΣX² − (ΣX)²/n)/(n−1), σ̂ = √V̂ |
| II  | Ψ8NS | 105 / (32 √π σ̂⁹) |
| III | g₁ | (−2K⁽⁶⁾(0) / (Ψ8NS n))^(1/9), K⁽⁶⁾(0) = −15/√(2π) |
| IV  | Ψ6(g₁) | [2 Σ_{i<j} K⁽⁶⁾((Xᵢ−Xⱼ)/g₁) + n K⁽⁶⁾(0)] / (n² g₁⁷) |
| V   | g₂ | (−2K⁽⁴⁾(0) / (Ψ6 n))^(1/7), K⁽⁴⁾(0) = 3/√(2π) |
| VI  | Ψ4(g₂) | [2 Σ_{i<j} K⁽⁴⁾((Xᵢ−Xⱼ)/g₂) + n K⁽⁴⁾(0)] / (n² g₂⁵) |
| VII | h | (R(K) / (Ψ4 n))^(1/5), R(K) = 1/(2√π) |

with K⁽⁴⁾(x) = (x⁴ − 6x² + 3)φ(x), K⁽⁶⁾(x) = (x⁶ − 15x⁴ + 45x² − 15)φ(x) and
φ(x) = e^(−x²/2)/√(2π). The pair sums of steps IV and VI use the symmetry K(−x) = K(x). They
run over i < j only, double the result and add the n diagonal terms n·K(0).

**Optional z-score preprocessing.** With raw data, σ̂⁹ in step II leaves the fixed-point
range quickly. σ̂ = 3 already gives σ̂⁹ ≈ 2·10⁴, and Ψ8NS ≈ 10⁻⁴ keeps only about 19
significant bits. The `OP_RUN_Z` run therefore first rewrites every sample as
Zᵢ = (Xᵢ − μ)/σ̂. The selector then runs with V̂ = σ̂ = 1, so Ψ8NS is a constant, and the
result is scaled back by h_final = h·σ̂.

## 2. Number format and operators

Every value on a port and between units is signed **Q32.32**: a 64-bit word with 32 fraction
bits, range ±2³¹, resolution 2.3·10⁻¹⁰ (`plugin_pkg::fix_t`). Addition is a plain 64-bit
add, and subtraction is the addition of a negated operand. Multiplication (`fx_mul`) keeps
bits 95:32 of the 128-bit product, rounded to nearest. There is no divider anywhere:

* **Reciprocal (`fx_recip`)** uses Newton's method. |a| is normalised to m ∈ [0.5, 1)
  with a leading-one search, and the start value is y₀ = 48/17 − 32/17·m. Four steps of
  y ← y(2 − my) follow in a Q3.60 datapath, one multiplication per clock. The result is
  shifted back, rounded and signed. Latency is 12 clocks.
* **ln and exp (`cordic_lnexp`)** use hyperbolic CORDIC with iteration indices 1…40, where
  indices 4, 13 and 40 run twice, as convergence requires. The datapath is Q3.60 and runs
  one iteration per clock, for a latency of 47 clocks.
  *exp*: a = k·ln2 + r, rotation from (1/K_h, 0, r) gives e^r = x + y, which is then
  shifted by k.
  *ln*: a = m·2ᵉ, vectoring from (m+1, m−1) gives z = atanh((m−1)/(m+1)) = ln(m)/2, and
  ln a = 2z + e·ln2.
  Roots and the fractional powers of steps I, III, V and VII are computed as
  x^y = exp(y·ln x).
* **Pipelined exponential (`remez_exp`)** is the second, kernel-only exponential. It
  computes e^(−w) with w = k·ln2 + r. A degree-7 minimax polynomial of e^(−r) on [0, ln2]
  has a largest error of 2.9·10⁻¹¹. Its coefficients come from a Remez exchange and are
  stored as round(cⱼ·2⁶⁰). Horner evaluation takes one pipeline stage per coefficient,
  followed by a right shift by k. It accepts one operand per clock with a latency of
  10 clocks. The result is also given with 60 fraction bits (`y_q60`).

The constants in `plugin_pkg` are the Q32.32 roundings of the values in the table above. The
CORDIC angle table holds round(atanh(2⁻ⁱ)·2⁶⁰).

## 3. The pair-sum engine (`psi_unit`)

Steps IV and VI are the same unit, instantiated with `ORDER = 6` and `ORDER = 4`. Its
structure:

```
             1/g (Newton, once)                    n², g^(r+1) -> MUL -> 1/(n² g^(r+1)) (Newton, once)
                 |                                                            |
 X_i (held) -> SUB -> MUL -> K^(r) routine (14 clk) --+                       |
 X_j       ----^                                       |                       |
 X_i (held) -> SUB -> MUL -> K^(r) routine ----------- ADD(lanes) -> ACC -> x2 + nK(0) -> MUL -> Psi
 X_j+1     ----^                                        (lane 1 masked past j = n-1)
```

* **Set-up.** The unit takes 1/g from the shared reciprocal, so that each kernel argument
  is (Xᵢ − Xⱼ)·(1/g). It forms g^(r+1) by r multiplications and n² g^(r+1) by one more,
  then takes the reciprocal of that.
* **Loop.** The loop walks the rows i = 0…n−2. In the first clock of a row, read port 0
  fetches Xᵢ, which is held in a register. In each following clock the `LANES` read ports
  fetch Xⱼ…Xⱼ₊ₗₐₙₑₛ₋₁, and each lane forms one difference, multiplies it by 1/g and
  enters its kernel pipeline. Lanes that would pass j = n−1 are masked. The lane results
  are summed into a single accumulator. The pipeline is not drained between rows, only
  once at the end (19 clocks).
  The pair loop therefore takes exactly Σ_{i=0}^{n−2} (1 + ⌈(n−1−i)/LANES⌉) clocks: about
  n²/4 for the default two lanes.
* **Kernel routine (`kernel_deriv`).** It squares u once. u² feeds both the polynomial
  (u⁴, u⁶ and small integer multiples, which are exact) and `remez_exp` with w = u²/2.
  The two branches meet in a multiplication that uses the 60-bit exponential. Without it,
  the Q32.32 rounding of e^(−u²/2) multiplied by u⁶ ≈ 2·10⁴ would cost about 10⁻⁶ of
  absolute error per term. A final multiplication by 1/√(2π) follows. For |u| ≥ 16 the
  output is forced to 0: the true value is below 10⁻⁴⁸, and the cut-off keeps u⁶ inside
  the Q32.32 range.
* **Finish.** Ψ = (2·ACC + n·K(0)) · 1/(n² g^(r+1)).

**Precision.** The last factor is one Q32.32 number. With standardised data it is never
small: for n = 1024, 1/(n²g₁⁷) ≈ 5·10⁻⁵, which is 2·10⁵ LSB. With raw data of larger
spread, g₁ grows with σ̂ and the factor shrinks. For n = 121 and σ̂ = 3.8 it is only
~245 LSB, so Ψ6 and *h* lose accuracy (about 10⁻⁴ relative in that case). Use `OP_RUN_Z`
for data whose spread is not close to 1.

## 4. Sequencing and resource sharing

`plugin_ctrl` runs the phases in the order of the algorithm:

```
OP_RUN  : VAR -> SD -> P8 -> G1 -> P6 -> G2 -> P4 -> H -> done
OP_RUN_Z: VAR -> SD -> ZS -> P8(sigma=1) -> G1 -> P6 -> G2 -> P4 -> H(scale sigma) -> done
```

Entering a phase pulses that unit's `start`. The unit's one-clock `done` advances the
controller. Because only one step is ever active, `plugin_top` uses the phase to route
three shared resources:

* the sample memory's read ports, and its write port during `ZS`;
* the single request/response port of `math_unit`, which holds the only reciprocal and the
  only CORDIC. A request (`mreq.valid`, `fn`, `a`) is answered by `mrsp.done` with `y`.
  An assertion checks that only one request is outstanding.

The step units:

| unit | module | what it does |
|---|---|---|
| variance | `variance_unit` | streams the samples, one per clock. Accumulates ΣX and ΣX², then μ = ΣX·(1/n) and V̂ = (ΣX² − μΣX)·1/(n−1). This is the textbook formula rearranged so that no 1/(n(n−1)) appears. |
| std. dev. | `stddev_unit` | σ̂ = exp(ln(V̂)/2) |
| z-score | `zscore_unit` | Zᵢ = (Xᵢ − μ)·(1/σ̂), written back in place, one sample per clock |
| Ψ8NS | `psi8ns_unit` | σ̂⁹ by four multiplications, reciprocal, times 105/(32√π) |
| g₁, g₂, h | `bw_unit` (three instances) | scale·exp(ln(C·1/(Ψ·n))/K) with (C, K) = (30/√(2π), 9), (−6/√(2π), 7), (1/(2√π), 5). Scale is σ̂ for *h* after standardisation, else 1. |
| Ψ6, Ψ4 | `psi_unit` | section 3 |

## 5. Interface and use

`plugin_top #(DEPTH = 1024, LANES = 2)`:

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous reset, active low |
| `A` | in | 64 | sample, Q32.32 |
| `op` | in | 8 | `00` NOP, `01` CLEAR (n := 0), `02` LOAD (store A as sample n, n := n+1), `03` RUN, `04` RUN_Z |
| `RSLT` | out | 64 | bandwidth *h* (Q32.32), valid from the `done` pulse until the next run ends |
| `busy` | out | 1 | a run is in progress; ops other than NOP are ignored meanwhile |
| `done` | out | 1 | one-clock pulse when RSLT is updated |

A session looks like this: one `CLEAR`, then n clocks of `LOAD` with the samples on `A`, then
one `RUN` or `RUN_Z`, then a wait for `done`. A `LOAD` beyond `DEPTH` samples is dropped.
`RUN_Z` overwrites the stored samples with their standardised values. Reload the data
before running the same set raw. A run needs n ≥ 2 and V̂ > 0.

Run length at the default configuration, z-score run, simulated (200 MHz clock assumed for
the time):

| n | clocks | time at 200 MHz |
|---|---|---|
| 128 | 9 318 | 47 µs |
| 256 | 34 406 | 172 µs |
| 512 | 133 734 | 669 µs |
| 1024 | 528 998 | 2.65 ms |

For n = 1024, the two pair loops account for 2 × 262 655 clocks. The rest is the
sequential steps: variance and standardisation passes of about n clocks each, and about 20
reciprocal, ln and exp operations of 12–47 clocks each.

## 6. Accuracy

Compared with a double-precision evaluation of the same formulas (full double sums), the
simulated designs give:

* standardised data, n = 128…1024: relative error of *h* between 3·10⁻⁸ and 2.5·10⁻⁷;
* raw data with σ̂ ≈ 1, n = 1024: 4.6·10⁻⁷.

Raw data of large spread behaves as described in section 3. Beyond σ̂ ≈ 10.9, σ̂⁹ no longer
fits Q32.32 at all.

Size limits: n ≤ `DEPTH`, and n² must stay below 2³¹ (n ≤ 46 340) because n² is formed
as a Q32.32 integer.

## 7. Files

`rtl/` holds one module or package per file:

* `plugin_pkg` — types, operators, constants, op codes
* `plugin_top` — the top level
* `plugin_ctrl` — the phase controller
* `math_unit` — the shared operators, `fx_recip` and `cordic_lnexp`
* `data_bram` — the sample memory
* step units: `variance_unit`, `stddev_unit`, `zscore_unit`, `psi8ns_unit`, `bw_unit`,
  `psi_unit`
* kernel path: `kernel_deriv` and `remez_exp`

`tb/` holds one self-checking testbench per module (`tb_<module>.sv`). Each prints
`TB_RESULT checks=N failures=M`. `tb_plugin_top` runs the whole design at `DEPTH = 128`.
It also makes each mechanism happen and counts it: raw and standardised runs, masked
lanes, the kernel cut-off, CLEAR, dropped loads and ops ignored while busy.
`tb_plugin_full` runs the default configuration on n = 128, 256, …, 1024 and prints the
clock counts.
Helpers: `plugin_ref_pkg` (double-precision reference of the whole algorithm and a
data generator) and `math_model` (behavioural reciprocal/ln/exp used by the unit
testbenches).

Simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/plugin_pkg.sv tb/plugin_ref_pkg.sv tb/tb_plugin_full.sv --top-module tb_plugin_full
obj_dir/Vtb_plugin_full
```

The full-size run takes about 10 seconds. Replace the last file and the top module name for
any other testbench.

## 8. Relation to the published design

Taken from the published design:
* the seven steps and the optional z-score branch;
* Q32.32 everywhere;
* divisions replaced by multiplications with Newton reciprocals;
* CORDIC for ln and exp, and roots computed through them;
* a separate pipelined minimax exponential inside the kernel routines;
* the symmetric pair sums, unrolled twice;
* the unit breakdown, and the top-level ports A (64-bit, Q32.32), op (8-bit) and
  RSLT (64-bit, Q32.32).

This design's own choices:
* The op encoding and the load protocol, plus the clk/rst_n/busy/done ports.
* Memory depth 1024, the largest data set measured.
* One shared reciprocal/CORDIC instance.
* All iteration counts, polynomial degrees and internal Q3.60 precisions.
* The |u| ≥ 16 kernel cut-off.
* In-place standardisation.
* The rearranged variance formula.
* Ψ8NS's power by repeated multiplication.
* A pair loop that fetches Xᵢ once per row and drains only at the end.
* g₁, g₂ and *h* as three instances of one parameterised unit, where the published
  overview draws three separate units.

Known differences:
* The published block diagram of the Ψ4 unit adds n·K(0) after the final multiplication
  and draws no doubling of the pair sum. The formula it implements doubles the sum and
  adds n·K(0) inside the bracket, and this design follows the formula.
* The published design's BRAM also holds "temporary and auxiliary data". Here
  intermediate scalars are kept in unit registers.
* The published "literal" and "minimal" variants, which were smaller and slower, are not
  reproduced.
* No clock-frequency or resource result of the published design is claimed for this RTL.
  The measured time of the published fast version at n = 1024 was 3.14 ms. This design
  needs 529 k clocks, 2.65 ms at the same 200 MHz, if it met that frequency.
