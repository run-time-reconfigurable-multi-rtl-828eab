# Run-time-reconfigurable multi-precision floating-point 4x4 matrix multiplier

This core multiplies two 4x4 matrices of IEEE-754 doubles. Its main idea is
that the precision of every element multiplication can be chosen at run time
to save effort. A 3-bit precision select travels with each operation and sets
how many mantissa bits the multipliers use: 8, 16, 23, 36 or all 52. An auto
mode picks the width from the operands. Operands and results are always full
doubles. Only the mantissa multiplier inside each floating-point multiplier
changes with the mode, and the unused ones are held idle.

The design has two levels:

* **Matrix level.** Each 4x4 matrix is cut into 2x2 blocks. All eight block
  products run at the same time in eight *processing elements* (PEs). Each PE
  is a complete 2x2 matrix multiplier using Strassen's algorithm, so it needs
  7 multiplications instead of 8. Block adders then sum the block products.
  A 4x4 product therefore takes only as long as one 2x2 product.
* **Element level.** Each PE contains seven run-time-reconfigurable
  floating-point multipliers. Each of these has five mantissa multipliers of
  different widths. Every mantissa multiplier is a Karatsuba multiplier that
  recurses down to 8-bit Urdhva Tiryagbhyam ("vertically and crosswise")
  multipliers.

The RTL follows a published FPGA design of this architecture. Where that
description is silent or contradicts itself, this implementation made its own
choices. They are listed in [Departures and choices](#departures-and-choices).

## Hierarchy

```
matmul4x4                      4x4 top: block split, 8 PEs, 4 block adders, output regs
├── pe  (x8)                   2x2 Strassen multiplier with input/output registers
│   ├── alpha_beta_calc        10 fp_add: Strassen operand sums
│   ├── partial_product_calc   7 rtr_fp_mult: S1..S7
│   │   └── rtr_fp_mult (x7)   67-bit operands, mode select, rounding, FP multiply
│   │       ├── mode_select    mode decode, mode-select error, auto-mode
│   │       ├── trunc_round (x2)
│   │       └── fp_mult_core   sign, exponent, 5 mantissa multipliers, normaliser
│   │           └── karatsuba_mult (W = 9, 17, 24, 37, 53) -> urdhva_mult (N = 8)
│   ├── final_product_calc     8 fp_add: p11..p22
│   └── pe_control             sequencer FSM
└── submatrix_add (x4)         4 fp_add each
fpmm_pkg                       shared types: fp64_t, fp67_t, mode_e, fp_flags_t
```

Each source file in `rtl/` holds one module or package under the same name.
Each file opens with a description of what the module does and its timing.

## Number format and precision modes

A multiplier operand is 67 bits wide:

| bits   | 66..64           | 63   | 62..52   | 51..0    |
|--------|------------------|------|----------|----------|
| field  | precision select | sign | exponent | mantissa |

Bits 63..0 are an ordinary double with bias 1023. Both operands of one
multiplication must carry the same select bits. If they differ, or name an
undefined code, the multiplier raises **mode select error** and does not run.
The PE and the top take a single `prec_sel` and prepend it to every operand.

| code | mode | mantissa bits used | significand multiplier |
|------|------|--------------------|------------------------|
| 000  | auto | chosen from the operands | one of the below |
| 001  | 2    | 8                  | 9 x 9   |
| 010  | 3    | 16                 | 17 x 17 |
| 011  | 4    | 23                 | 24 x 24 |
| 100  | 5    | 36                 | 37 x 37 |
| 101  | 6    | 52 (full double)   | 53 x 53 |
| 110, 111 | — | undefined: mode select error | — |

The select may change from one operation to the next. No reconfiguration
step or pipeline flush is needed.

### What a reduced mode computes

In mode k (k < 52), each operand is handled in three steps:

1. **Truncate and round the operand** (`trunc_round`). The mantissa is cut
   after its k-th bit, called L. The next four bits are G, R, T and E. The
   kept part is rounded up by `rnd = G & (R | T | E)`, so a lone G bit does
   not round up. Bits below E are ignored. If the increment carries out of
   the mantissa, the value renormalises to the next exponent.
2. **Multiply the significands** at width k+1 (`fp_mult_core`). The exponents
   are added and 1023 is subtracted. The sign is the XOR of the operand signs.
3. **Normalise** the product. A product of two values in [1,2) lies in [1,4),
   so at most a one-place shift and an exponent increment are needed. The
   mantissa is then **truncated** to 52 bits.

In mode 6 (52 bits), step 1 is skipped and the product is truncated.

Example: 4069b130ae804118 (≈ 205.54) squared, as computed by this RTL:

| mode   | result             |
|--------|--------------------|
| 8-bit  | `40e49ec800000000` |
| 16-bit | `40e4a0b01b480000` |
| 23-bit | `40e4a0b11c33e320` |
| 36-bit | `40e4a0b1337c7737` |
| 52-bit | `40e4a0b1337cdfbd` |
| auto   | `40e4a0b1337c7737` (resolves to 36-bit) |

The 8, 16, 23 and 52-bit values match the published results bit for bit.
Auto-mode does not; see below.

### Auto-mode

Auto-mode tries to find where a mantissa's useful bits end. A run of six or
more zeros is taken as the end of the significant part. Logic per operand
(`mode_select`):

* Scan the 52-bit mantissa from bit 51 downwards. Find the first 1 that is
  followed by at least six 0 bits. Bits below bit 0 count as 0, so the lowest
  set bit always qualifies.
* Let n be the position of that 1. The operand needs about 52 − n bits:

  | n        | mode    |
  |----------|---------|
  | ≥ 44     | 8-bit   |
  | 35 .. 43 | 16-bit  |
  | 28 .. 34 | 23-bit  |
  | 16 .. 27 | 36-bit  |
  | < 16     | 52-bit  |
  | mantissa zero | 8-bit |

* The operation uses the wider of the two operands' choices.

The thresholds 44, 35, 28 and 16 are the published ones. Set bits below a
6-zero gap are dropped, so auto-mode is not lossless. For 4069b130ae804118,
bit 23 is the first 1 followed by six zeros, so the 36-bit mode is picked.
The published results list the exact double product for auto-mode instead.
That result cannot come from the published selection rule, and this RTL
follows the rule.

Small integers and short binary fractions fall into the 8-bit mode. There
they are multiplied exactly, which is the intended use of the low modes.

## Karatsuba–Urdhva mantissa multipliers

`karatsuba_mult #(W)` splits each W-bit operand into an upper part of
F = ⌊W/2⌋ bits (X_l) and a lower part of S = W − F bits (X_r). It then forms

```
p1 = X_l*Y_l      p2 = X_r*Y_r      p3 = (X_l + X_r)*(Y_l + Y_r)
X*Y = p1 << 2S  +  p2  +  (p3 - p1 - p2) << S
```

This is the Karatsuba identity, and it also holds when W is odd. Each of the
three sub-products is again a `karatsuba_mult`. The recursion stops once the
operands are at most 8 bits wide. The middle product has operands one bit
wider than the halves, so some leaves are 5 to 8 bits wide. Leaves are
zero-extended into `urdhva_mult #(8)`.

`urdhva_mult` adds up the product column by column. Column k sums every AND
term `a[i] & b[k-i]` plus the carry word from column k−1. The LSB of that sum
is product bit k, and the rest carries into column k+1. An 8x8 multiplier thus
has 14 column adders, and a 4x4 has 6. This matches the classic 4x4 Urdhva
schematic, where each adder feeds the next.

Recursion depth for the 53-bit significand: 53 → 26/27/28 → … → 8-bit leaves.

## Processing element (Strassen 2x2)

For A = [a11 a12; a21 a22] and B = [b11 b12; b21 b22], the PE computes:

```
alpha1 = a11 + a22   beta1 = b11 + b22      S1 = alpha1 * beta1
alpha2 = a21 + a22   beta2 = b12 - b22      S2 = alpha2 * b11
alpha3 = a11 + a12   beta3 = b21 - b11      S3 = a11    * beta2
alpha4 = a21 - a11   beta4 = b11 + b12      S4 = a22    * beta3
alpha5 = a12 - a22   beta5 = b21 + b22      S5 = alpha3 * b22
                                            S6 = alpha4 * beta4
                                            S7 = alpha5 * beta5
p11 = S1 + S4 - S5 + S7     p12 = S3 + S5
p21 = S2 + S4               p22 = S1 - S2 + S3 + S6
```

Additions use `fp_add`, an IEEE double adder with round-to-nearest-even. Only
the seven multiplications run at the selected precision. The additions before
and after them are always full double precision. A reduced mode therefore
rounds alpha·beta, not the original elements. For example, S1 multiplies
round_k(a11+a22) by round_k(b11+b22).

The PE registers its eight inputs and the 3-bit select (input registers). It
also registers its four outputs (output registers). These are the twelve
64-bit registers and one 3-bit register of the published PE.

## 4x4 level

```
C0 = A0*B0 + A1*B2     C1 = A0*B1 + A1*B3        A0 = rows 0-1, cols 0-1
C2 = A2*B0 + A3*B2     C3 = A2*B1 + A3*B3        A1 = rows 0-1, cols 2-3 ...
```

Each of the eight block products has its own PE. `submatrix_add` forms each
C block, which is registered. The top therefore holds 56 reconfigurable
multipliers and 8·18 + 16 = 160 double adders.

## Timing and control

All registers use the rising edge of `clk`. `reset` is synchronous and active
high.

| unit          | accepts                                   | result                                                          |
|---------------|-------------------------------------------|-----------------------------------------------------------------|
| `rtr_fp_mult` | `ready` high at an edge; one op per clock | `valid` pulse 2 clocks later                                    |
| `pe`          | `ready` high at an edge while not `busy`  | `done` pulse 4 clocks later (load, start, multiply, load outputs) |
| `matmul4x4`   | `ready` high at an edge while not `busy`  | `done` pulse 5 clocks later; `c` holds until the next result    |

Inside the PE, `pe_control` steps through IDLE → START → RUN → CHECK → DONE.
If the multipliers report a mode select error in CHECK, the PE returns to
IDLE. It gives no `done`, sets `mod_sel_error` and keeps the old outputs. The
next accepted operation clears the error. `ready` is ignored while busy.

Flags `zero`, `infinity`, `nan` and `denormal` come from the element
multipliers. Each flag is ORed over the seven multipliers of a PE and then
over the eight PEs, and registered with the result. They mean "some
element product was zero / infinite / NaN / denormal". They do not describe
the elements of C.

Exception handling in the multiplier:

* A NaN operand, or infinity times zero, gives a quiet NaN.
* An infinite operand, or exponent overflow, gives infinity.
* A zero operand or a denormal operand gives zero: denormal inputs are
  flushed.
* Exponent underflow gives a denormal result, right-shifted and truncated.

The adder flushes denormal inputs and outputs to zero.

## Departures and choices

Points where the published description is incomplete or inconsistent, and
what the RTL does:

* **4x4 decomposition.** The text calls the top level "Strassen", but the
  4x4 equations it gives are the eight-block classical form. That form is
  built here. Strassen is used inside each PE. The top-down scheme for
  matrices larger than 4x4 (Strassen across blocks with classical sums inside)
  is described only in general terms and is not built.
* **Rounding after multiplication.** The text says results are rounded after
  multiplying. The published double-precision result is the truncated value,
  so the RTL truncates.
* **Auto-mode.** The selection chart has no branch to the 52-bit mode, and its
  comparisons are written against "m". The RTL reads them as bit positions,
  adds the 52-bit branch for n < 16, and uses the wider of the two operands'
  modes.
* **beta5.** The published alpha/beta list gives beta5 = b21 − b22. The
  seven-product list and Strassen's identity need b21 + b22, which is used.
  Likewise the fourth recombination line, printed as "p11", is p22.
* **Urdhva carries.** One equation feeds adders 4 to 6 from adder 1's carry.
  The RTL ripples each column into the next, as the schematic draws it.
* **Adder structure.** The text recommends carry-save and carry-select
  adders in the multipliers. The RTL writes each column sum and each
  Karatsuba recombination as a plain `+`/`-` expression. The adder
  architecture is left to synthesis.
* **Infinity/NaN exponent.** The text speaks of "exponent + bias = 1023". The
  RTL uses the IEEE all-ones exponent. Its denormal scaling "2^-511" is not
  followed; results are IEEE denormals.
* **Not described, chosen here:**
  * the floating-point adder
  * every cycle-level timing
  * the `valid`, `done`, `busy` and `mode_used` outputs
  * treating codes 110/111 as errors
  * ORing the flags
  * what "shutting down" unused multipliers means: their operands are forced
    to zero (operand isolation). There is no clock or power gating.

The published area and delay figures come from the original authors' FPGA
mapping. They are not properties of this RTL.

## Verification

Each module has a self-checking testbench in `tb/`. Every testbench prints
`TB_RESULT checks=N failures=M` and stops itself after a fixed time.
`tb/tb_ref_pkg.sv` holds the reference models. They use plain integer `*` and
the simulator's `real` arithmetic, not the RTL's structure.

| testbench | what it checks |
|-----------|----------------|
| `tb_urdhva_mult` | all 4x4 and 8x8 operand pairs |
| `tb_karatsuba_mult` | widths 8, 9, 16, 17, 24, 32, 37 and 53; random and corner operands |
| `tb_mode_select` | every auto-mode threshold from both sides, errors, random mantissas |
| `tb_trunc_round` | every mode; G-only (no round-up) and carry-out cases |
| `tb_fp_mult_core` | the published mode results, random operands per mode, exceptions |
| `tb_rtr_fp_mult` | published results, 2-clock latency, a mode switch every clock, auto-mode, halt on error |
| `tb_fp_add` | 20k random cases against IEEE `real` arithmetic; cancellation, ties and specials |
| `tb_alpha_beta_calc`, `tb_final_product_calc`, `tb_submatrix_add` | each against `real` arithmetic |
| `tb_partial_product_calc` | S1..S7 in every mode, latency, flags, halt |
| `tb_pe_control` | state timing, busy, error path, reset |
| `tb_pe` | random 2x2 in all modes (bit-exact against the model); integer matrices exact in every mode; flags; halt |
| `tb_matmul4x4` | end to end at the default configuration (below) |

`tb_matmul4x4` runs 41 operations: random matrices in all six modes with a
mode change on almost every operation, integer matrices, auto-mode, an
undefined code, and zero, infinity, NaN and underflow inputs. Results are
compared bit-exactly against the model, and against the classical product for
integer matrices. Latency is checked on every operation. The testbench counts
how often each mechanism occurred and fails if any never did.

Running a testbench with Verilator 5, from the directory holding `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/fpmm_pkg.sv tb/tb_ref_pkg.sv tb/tb_matmul4x4.sv --top-module tb_matmul4x4
./obj_dir/Vtb_matmul4x4
```

Replace the testbench name to run the others. The full top takes about two
minutes to build and well under a second to run.

Linting `karatsuba_mult` on its own as the top module gives
UNDRIVEN/UNUSED warnings. They are reported on an unelaborated copy of the
self-instantiating module, and do not appear once the module is instantiated.

## Changing the design

* **Mode widths.** `fp_mult_core` instantiates one `karatsuba_mult` per mode
  and aligns each product to 106 bits. To change a width, edit the
  instantiation, the operand slice and the shift in the product mux. Also edit
  `mode_man_bits` in `fpmm_pkg`.
* **Recursion leaf.** `karatsuba_mult` takes `LEAF` to change where the
  recursion stops.
* **Auto-mode thresholds.** They are in `mode_select::auto_mode`.
* **Rounding.** Step 1 (operand rounding) is in `trunc_round`. The product is
  truncated in the normaliser of `fp_mult_core`.
