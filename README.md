# AdAM — an approximate multiplier that hardens itself with its own spare adder bits

AdAM is an 8 × 8-bit unsigned approximate multiplier for DNN accelerators. It has two aims:
low area, and some tolerance of transient faults (single-event upsets) in its combinational logic.
It uses Mitchell's logarithmic method: multiplying becomes adding two approximate logarithms.
The mantissa adder in that method has unused capacity whenever the operands are small, and AdAM
uses that capacity for protection. Spare adder cells recompute the most significant sum bits.
When a bit and its copy disagree, the bit is forced to 0. Which bits get a copy depends on the
larger operand's magnitude. The short exponent adder is simply triplicated and voted.

This repository holds synthesizable SystemVerilog for the whole multiplier. Every block has a
self-checking testbench. There is also an end-to-end test with fault injection, and an accuracy
workload.

## 1. Mitchell's method in this datapath

For an operand `x` with its leading one at bit `k`, write `x = 2^k (1 + m)` with `0 <= m < 1`.
Then `log2 x ≈ k + m`. The product of `a` and `b` is approximated as

```
ka + kb + ma + mb  ->  if ma + mb < 1 :  P = 2^(ka+kb)   (1 + ma + mb)
                       else           :  P = 2^(ka+kb+1) (ma + mb)      (= 2^(ka+kb+1) (1 + (ma+mb-1)))
```

The second line has the same form as the first, with the exponent raised by one and the
carry-free part of the mantissa sum. So one datapath covers both cases. The carry out of the
mantissa adder is added to the exponent, and the remaining mantissa bits follow the leading one.

```
 a[7:0] ─┬─ LOD ── ka[2:0] ─────────────┬──────────────┐
         └─ barrel shift ── ma[4:0] ─┐   │              │
                                     ├─ adaptive adder ─┼── r[4:0] ───────────────┐
 b[7:0] ─┬─ LOD ── kb[2:0] ──────────┼──┬┘  (mode from max(ka,kb))                │
         └─ barrel shift ── mb[4:0] ─┘  │         │ cout                           │
                                        │         v                               v
                            3 × (ka + kb + cout) ──> majority voter ── e[3:0] ──> antilog ──> p[15:0]
```

| stage | module | what it computes |
|---|---|---|
| leading-one detector | `adam_lod` | `k` = index of the highest 1, plus a zero flag |
| barrel shifter | `adam_barrel_lshift` | the 5 bits after the leading one (`m` scaled by 32, truncated) |
| mode select | `adam_mode_select` | 2-MSB or 3-MSB protection, from `max(ka, kb)` |
| adaptive adder | `adam_adaptive_adder` (+ `adam_pfa`, `adam_cla_carry`) | `ma + mb` with duplicated MSBs, AND-mitigated |
| exponent adders ×3 | `adam_hybrid_adder` | `ka + kb + cout`, 4 bits |
| voter | `adam_tmr_voter` | bitwise 2-of-3 majority |
| antilogarithm | `adam_antilog` | `p = ({1, r} << e) >> 5` |
| top | `adam_mult` | wiring; `p = 0` if either operand is 0 |

The whole multiplier is combinational. It has no clock, no reset and no registers, and its latency
is one propagation delay. Constants and shared types are in `adam_pkg`: `N_BITS = 8`,
`K_BITS = 3`, `T_BITS = 5`, `PFA_NUM = 7`, the enum `prot_mode_e` and the fault-injection struct
`adam_fault_t`.

## 2. What a 5-bit mantissa holds, by operand size

After the leading one, an 8-bit operand has `k` mantissa bits. The adder is 5 bits wide, so the
number of bits that survive depends on `k`:

| k (leading-one index) | operand bits kept as mantissa | bits lost | zero bits padded below |
|---|---|---|---|
| 7 | bits 6..2 | bits 1, 0 | 0 |
| 6 | bits 5..1 | bit 0 | 0 |
| 5 | bits 4..0 | none | 0 |
| 4 | bits 3..0 | none | 1 (`m[0] = 0`) |
| ≤ 3 | bits k-1..0 | none | ≥ 2 (`m[1] = m[0] = 0`) |

Only operands of 64 or more lose precision to the truncation. More importantly for protection: if
**both** operands have `k <= 4`, bit 0 of both mantissas is a known zero. Adding that bit needs no
adder cell, so the cell is free to check something else.

## 3. The adaptive adder

This is the core of the design. A plain 5-bit carry-lookahead adder uses five partial full adders
(PFAs), one per sum bit. This one has seven (n − 1), named `s0 .. s6`:

| PFA | inputs | role |
|---|---|---|
| s6 | a4 b4 c4 | sum bit 4 |
| s5 | a3 b3 c3 | sum bit 3 |
| s4 | a2 b2 c2 | sum bit 2 |
| s3 | a1 b1 c1 | sum bit 1 |
| s2 | **mux**: (a0 b0 c0) or (a2 b2 c2) | sum bit 0, or a second copy of bit 2 |
| s1 | a3 b3 c3 | second copy of bit 3 |
| s0 | a4 b4 c4 | second copy of bit 4 |

The five result bits are:

```
r4 = s6 & s0
r3 = s5 & s1
r2 = (mode == PROT_TOP3) ? s4 & s2 : s4
r1 = s3
r0 = (mode == PROT_TOP3) ? 0       : s2
```

The two modes:

- **`PROT_TOP2`**, used when `max(ka, kb) >= 5`. All five mantissa bits may be non-zero, so
  `s2` adds bit 0. Bits 4 and 3 are protected. Bits 2, 1 and 0 are not.
- **`PROT_TOP3`**, used when `max(ka, kb) <= 4`. Bit 0 of both mantissas is zero, so the
  multiplexers move `s2` to recompute bit 2, and `r0` is tied to 0. Bits 4, 3 and 2 are
  protected. Bit 1 is not. For `max(ka, kb) <= 3`, bit 1 is also always zero, so every bit that
  carries information is protected.

**Mitigation by AND.** Suppose a transient fault flips one copy of a protected bit. If the true
value was 1, the AND of a 1 and a 0 gives 0. If the true value was 0, the result stays 0. In both
cases the faulty bit reads 0. The rest of the result is intact, so the error is at most the weight
of that one mantissa bit. The design does not raise an error flag: detection and correction happen
together in the AND gate.

**Carries.** The carries `c1 .. c5` come from a single lookahead unit, `adam_cla_carry`. It
computes generate `a&b` and propagate `a^b` from the operand bits and forms each carry as a flat
sum of products. The carry-in `c0` is 0. The duplicate PFAs use the same carries as the originals.
As a result, a fault in the lookahead logic reaches both copies and is not detected. This is a
limit of the scheme, not of this RTL.

`cout = c5` leaves the adder and goes to the exponent adders. An immediate assertion in the adder
checks the mode contract: `PROT_TOP3` may only be selected when `a[0] = b[0] = 0`.

## 4. The exponent path: triplicated, because it decides everything

The exponent `e = ka + kb + cout` (0..15, 4 bits) sets where the product's leading one goes. A
single wrong exponent bit would scale the product by a power of two. This adder is small, so it is
simply built three times (`adam_hybrid_adder`, written as a 3-bit ripple-carry adder with carry-in).
A bitwise majority voter (`adam_tmr_voter`) takes the result. The voter itself and the shared
inputs `ka`, `kb` and `cout` are not replicated.

## 5. Antilogarithm and zero

`adam_antilog` forms `p = ({1'b1, r} << e) >> 5` in a 21-bit intermediate and keeps bits 20..5.
Mantissa bits that would land below bit 0 are dropped, so the result is truncated. The largest
exponent, 15, places the leading one at bit 15, so the product always fits in 16 bits.

Mitchell's logarithm has no value for 0. The LODs therefore raise a zero flag, and the product is
then forced to 0.

## 6. Accuracy

With no faults, the multiplier never overestimates. Over all 255 × 255 non-zero operand pairs:

- the mean absolute relative error (MARE) is **4.83 %**; the published figure for this multiplier is 4.7 %;
- the largest relative error is 13.8 %;
- random 25-term and 9-term dot products of 8-bit values (5×5 and 3×3 kernels) come out about
  5.1 % low on average.

The small MARE gap may come from how the average was taken, or from rounding in the original
design. The source says neither.

## 7. Where this RTL follows the source and where it chooses

These parts follow the published design directly:

- the block structure: LOD, barrel shift, adaptive adder, triplicated exponent adder with voter, antilog;
- the widths: n = 8, log2 n = 3, t = 5, an exponent of log2 n + 1 bits, a 2n-bit product;
- the seven-PFA adder wiring, its AND gates and its two output multiplexers;
- the five operand-size cases that decide the protection.

These are choices of this implementation, where the source is silent:

- **The mantissa carry goes into the exponent adders.** The published block diagram does not
  show where the mantissa carry goes. Routing it into the exponent adders is the standard Mitchell
  rule and keeps the exponent within 4 bits.
- **Multiplexer select polarity.** The `prot_mode_e` encoding and the `>= 5` comparator are this
  design's. The figure shows the multiplexers but no select line.
- **Circuit details of the sub-blocks.** The PFA has only a sum output, the lookahead unit is
  separate, the "hybrid" exponent adder is a ripple-carry adder, the LOD is a priority scan and the
  voter is a bitwise majority.
- **Zero handling, truncation and signedness.** A zero operand gives 0, the antilog truncates
  rather than rounds, and the operands are unsigned. Signed int8 use needs sign-magnitude handling
  around the multiplier.
- **The barrel shift amount.** The source says the operand is shifted "by k". To put the leading
  one at the MSB the shift must be `n-1-k`, which is what is built.
- **The fault-injection input `fi`.** It XORs masks onto the seven PFA outputs and onto each of
  the three exponent-adder outputs. It exists for testing. Tie it to `'0` in a real design.
  Synthesis then removes the XORs, but it may also merge the three identical exponent adders, so
  keep hierarchy or use don't-touch constraints to preserve the TMR.

There is one known difference from the source's wording. For operands with `k <= 3` the text
says that all bits are protected. In the adder wiring, `r1 = s3` is never duplicated. In that case
`r1` is always logically 0, so every bit that carries information is protected, but a fault in
PFA `s3` would still flip `r1` to 1.

The accelerator that the source evaluates the multiplier in is not part of this RTL. It is a
systolic array whose MAC units hold the multiplier, and the source describes it only as a
simulator.

## 8. Interface

```systemverilog
adam_mult #(.N(8), .T(5)) u_mul (
  .a (a),        // logic [7:0], unsigned
  .b (b),        // logic [7:0], unsigned
  .fi('0),       // adam_pkg::adam_fault_t, fault injection, 0 in use
  .p (p)         // logic [15:0], approximate a*b
);
```

`N` and `T` exist for readability only. The adaptive adder is drawn for exactly `T = 5` and seven
PFAs, and elaboration stops with an error for any other value.

## 9. Tests and how to run them

Each testbench is self-checking and prints `TB_RESULT checks=<n> failures=<n>`. Each also has a
watchdog.

| testbench | what it checks |
|---|---|
| `tb_adam_lod` | all 256 inputs: index of the highest 1, zero flag |
| `tb_adam_barrel_lshift` | all non-zero inputs: mantissa = floor((x − 2^k)·32 / 2^k); truncation seen |
| `tb_adam_mode_select` | all 64 (ka, kb) pairs against the `>= 5` rule |
| `tb_adam_pfa` | the truth table |
| `tb_adam_cla_carry` | all 1024 pairs: each carry against integer addition |
| `tb_adam_adaptive_adder` | both modes × all mantissa pairs × no fault or one flipped PFA: the zeroing of protected bits, the flipping of unprotected ones, and `cout` |
| `tb_adam_hybrid_adder`, `tb_adam_tmr_voter`, `tb_adam_antilog` | exhaustive against arithmetic |
| `tb_adam_mult` | end to end at the default size: all 65 536 pairs fault-free against a Mitchell reference model; 20 000 single PFA faults; 20 000 corrupted exponent replicas. It counts each mechanism (both modes, truncation, mantissa carry, zero operand, zeroed fault, unprotected fault, outvoted replica) and fails if any never occurs |
| `tb_adam_mare` | accuracy workload: MARE (must be 4.2–5.2 %), no overestimates, dot-product error, single-fault outcome statistics |

To run one with Verilator:

```sh
verilator --binary --timing --assert -Irtl rtl/adam_pkg.sv tb/tb_adam_mult.sv \
          --top-module tb_adam_mult -Mdir obj_mult -o sim
./obj_mult/sim
```

Put `rtl/adam_pkg.sv` first. Verilator finds the other modules in `rtl/` through `-Irtl`. Each
test takes well under a second.
