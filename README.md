# A constant-time CSIDH-512 co-processor in SystemVerilog

CSIDH is a post-quantum key exchange built on isogenies between
supersingular elliptic curves over a prime field F_p. A private key is a
vector of small exponents e_1..e_n, one for each small odd prime l_i dividing
p+1. The public key is the Montgomery coefficient A' of the curve reached
from a starting curve E_A by the "group action": walk |e_i| steps of degree
l_i, forward when e_i > 0 and backward when e_i < 0. Both sides then apply
their own key to the other's public curve and arrive at the same curve. That
shared curve is the secret.

This RTL computes the group action in hardware. It has one shared masked
modular ALU, a register file, and a hierarchy of finite-state machines that
issue field operations to it. The aim is that neither the run time nor the
power profile reveals the key:

* every prime l_i always receives exactly EMAX = 5 isogenies, whatever e_i is;
* the steps a key does not need are *dummy* isogenies, computed in full and then
  thrown away;
* the ALU keeps its adder, subtractor and multiplier switching in every clock
  cycle, feeding random operands to the units a command does not use.

The default configuration is CSIDH-512:

* a 511-bit prime p = 4·3·5·7·…·373·587 − 1;
* 74 small primes;
* exponents in [−5, 5];
* a 512-bit datapath built from 32-bit words.

## 1. Field arithmetic

All field elements are 512-bit values below p. The register file holds them
in Montgomery form, x·R mod p with R = 2^512. Constants are in `csidh_pkg`.

### Carry-select adder and subtractor (`csa_add`, `csa_sub`)

A 512-bit ripple adder is too slow for one clock. Both units split the
operands into sixteen 32-bit chunks and run in two pipeline stages:

* **Stage 1** forms two 33-bit results for every chunk, one assuming carry-in 0
  and one assuming carry-in 1, and registers both.
* **Stage 2** ripples only the chunk carries and uses them to pick the right
  result for each chunk.

The subtractor does the same with borrows. Latency is 2 clocks, with one new
operation accepted every clock.

### Modular add and subtract (`mod_add`, `mod_sub`)

* `mod_add` computes s = a + b, then s − p, and keeps s − p unless it borrowed.
* `mod_sub` computes d = a − b, then d + p, and keeps d + p only if a − b
  borrowed.

Each is two carry-select units in series, so the latency is 4 clocks.

### 512 × 512 multiplier (`mul512`)

This is a schoolbook multiplier arranged around "one chunk of A times all of
B per clock":

* 16 multipliers of 32 × 32 bits form the 16 partial products A_i·B_j together.
* A 17-chunk carry-select adder folds them into a 544-bit row.
* The row is added into a 1024-bit accumulator at offset 32·i.

The accumulation of row i has to finish before row i+1 can be added. This
forces a stall of one clock between chunks.

To hide the stall, A is split into a lower half (A0–A7) and an upper half
(A8–A15). The two halves run in two identical lanes with their own
accumulators, and a final 1024-bit carry-select addition merges the lanes.

The 32 × 32 multiplier comes in two versions, chosen by `MUL_CYC`:

| `MUL_CYC` | Multiplier | Latency of `mul512` |
|---|---|---|
| 1 (default) | one-cycle `*`, which maps to DSP blocks on an FPGA | 22 clocks |
| 2 | `booth_mul32`, a two-stage radix-4 Booth multiplier for standard cells | 23 clocks |

`booth_mul32` works on unsigned inputs padded with a zero bit, giving 17
partial products. Stage 1 adds nine of them and registers the other eight;
stage 2 adds the rest. Only one clock is added in total, because the second
multiplier stage overlaps the pipeline's existing stall.

### Montgomery multiplication (`mont_mul`)

REDC uses the same `mul512` three times:

1. T = a·b.
2. m = (T mod R)·p′ mod R, with p′ = −p⁻¹ mod R.
3. m·p.

It then forms (T + m·p)/R with a 1024-bit carry-select addition and
conditionally subtracts p. The latency is 3·22 + 5 = **71 clocks**.

### Masked ALU (`alu`)

The ALU holds one `mod_add`, one `mod_sub` and one `mont_mul`:

* The unit a command needs gets the real operands. The other two get words
  derived from the PRNG output, and their results are discarded.
* `mod_add` and `mod_sub` are pipelined and take new operands every clock.
* The Montgomery multiplier starts a dummy product whenever it is idle. A real
  `MUL` aborts a dummy that is in progress.

So all three units switch in every cycle, whatever the command. Latency:

| Command | Result ready after |
|---|---|
| ADD, SUB | 5 clocks |
| MUL | 72 clocks |

The ALU also reports whether the result is zero. The controllers use this flag
for every test they make.

## 2. Field-operation commands and the register file

Every curve-level FSM talks to the datapath through one small interface,
`fe_cmd_t` / `fe_rsp_t`:

* A command is {valid, op, dst, a, b}, where op is one of ADD, SUB, MUL, RND
  or LDIN.
* dst, a and b are 6-bit register numbers.
* The FSM raises `valid` for one clock and waits for `rsp.done`, which comes
  with the ALU's zero flag.
* FSMs that are idle drive all zeros, so the commands of all FSMs are simply
  ORed together. An assertion checks that only one FSM issues at a time.

`cu_regfile` holds 54 registers of 512 bits. Registers 0–3 are read-only
constants: 0, Montgomery 1 (R mod p), R² mod p, and plain 1. The last two
convert into and out of Montgomery form with a single MUL. RND writes a PRNG
word and LDIN writes the external input `a_in`; both answer on the next clock.

The fixed register map in `csidh_pkg` gives every FSM its own scratch
registers. The FSMs therefore pass data through agreed registers, not through
ports:

| Registers | Holds |
|---|---|
| `R_A24`, `R_C24` | the curve |
| `R_PX`, `R_PZ` | the current point |
| `R_MX`, `R_MZ` | the point being multiplied, or the kernel point |
| `R_NA24` … `R_NPZ` | the isogeny's outputs |

The curve is stored projectively as (A24 : C24) = (A + 2C : 4C). Neither the
ladder nor the isogeny ever needs a division.

## 3. Curve-level FSMs

Each FSM is a small sequencer that steps through a fixed list of field
operations.

**`xdbladd`** performs one Montgomery-ladder step: [2]P and P + Q given P − Q.

* It takes 20 operations, 12 of them multiplications. The two halves share
  X ± Z and its squares.
* P and Q are register addresses on ports. The ladder swaps them in place of
  the data.

**`xmul`** computes [k]P by the Montgomery ladder for a scalar of up to 10 bits.

* It uses one `xdbladd` call per bit of k, starting at k's top bit.
* All scalars here are public (a prime l_i, or 4). [k]P for a product of primes
  is built as a chain of such calls.

**`xisog`** evaluates an isogeny of odd degree l = 2d + 1 with kernel ⟨K⟩.

1. It walks K, [2]K, …, [d]K in a three-register sliding window. The first
   step is a doubling; after that each step is a differential addition.
2. It folds every multiple into four running products:
   * two for the image point φ(P), using the Costello–Hisil formulas;
   * two for the curve, using the Edwards-form formulas of Meyer–Reith:
     a′ = a^l·Π(X+Z)^8 and d′ = d^l·Π(X−Z)^8, with a = A + 2C and d = A − 2C.
3. It returns the new curve as (a′ : a′ − d′), which is again
   (A′ + 2C′ : 4C′).
4. With `FAULT_CHECK` = 1, it also forms [l]K = [d+1]K + [d]K and raises
   `fault` unless that point's Z is 0.

Results go to separate output registers, so the caller decides whether they
are kept.

**`xtwist`** decides whether an x-coordinate lies on the curve or on its
quadratic twist.

* It evaluates w = C·x·(C·x² + A·x + C). This has the same quadratic character
  as x³ + (A/C)x² + x.
* It then applies Euler's criterion, w^((p−1)/2).
* `rhs_zero` flags x-coordinates of 2-torsion points.

**`xaffinize`** computes X/Z using Z^(p−2).

* The exponent is the public constant p − 2, so the sequence is fixed:
  510 squarings plus one multiply per further set bit.

## 4. The constant-time group action (`csidh_ctrl`)

This is the part of the design that matters most, and the hardest to follow
in the code.

### State

For each prime the controller keeps:

* `e_rem[i]`, the true exponent still to be applied;
* `cnt[i]`, the number of isogenies still owed, starting at EMAX;
* `sgn[i]`, the direction.

### Run

1. **Load and basic validation.** `a_in` is loaded and multiplied by R². A ≥ p
   or A = ±2 (a singular curve) is rejected. The curve is set to
   (A + 2 : 4).
2. **Two direction phases.** Phase 0 handles e_i ≥ 0 and works on the curve.
   Phase 1 handles e_i < 0 and works on the twist.
3. **Rounds.** Each round does the following:
   1. The batch is up to 16 primes with `cnt ≠ 0` in the current direction. An
      empty batch ends the phase.
   2. A random x comes from the PRNG and is converted to Montgomery form.
      `xtwist` must put it on the curve (phase 0) or on the twist (phase 1);
      otherwise a new x is drawn. These are the *point retries*.
   3. P is multiplied by 4 and by every prime outside the batch. P now has
      order dividing the product of the batch primes.
   4. For each batch prime i, highest first:
      * K = [product of batch primes below i]·P.
      * If K is the point at infinity, i is skipped. It stays owed and comes
        back in a later round.
      * Otherwise `xisog(l_i)` runs, then [l_i]P is computed with `xmul`.
      * Four copies commit the step. A real step (e_rem ≠ 0) copies the new
        curve and φ(P). A dummy step copies the old curve and [l_i]P.
      * `cnt` drops by one, and for a real step `e_rem` moves one towards 0.
4. **Validation** (`VALIDATE` = 1). A random point is multiplied by
   p + 1 = 4·Π l_i. Its Z must be 0.
5. **Output.** The curve is made affine as A′ = (4·A24 − 2·C24)/C24, converted
   out of Montgomery form, and written to `R_OUT`.

### Why real and dummy steps look alike

In a real step the point update is φ(P) and [l_i]P is thrown away. In a dummy
step the point update is [l_i]P and φ(P) is thrown away. Both therefore run
exactly the same operations. Real and dummy differ only in the source register
numbers of the four commit copies.

### What the run time depends on

The total number of isogenies is always 74 × 5 = 370. The number of clocks
depends only on the random points drawn: point retries, kernels at infinity,
and therefore the number of rounds.

### Failure

`success` = 0 after any of these:

* a rejected input;
* a failed validation;
* a fault from any isogeny's [l]K check, real or dummy.

In that case `a_out` is a random field element.

## 5. Top level (`csidh_top`)

`csidh_top` connects `csidh_ctrl` (with `xmul`, `xisog`, `xtwist` and
`xaffinize` inside it), `cu_regfile`, `alu` and `xprng`. `xprng` is 16 parallel
xorshift32 generators, re-seeded from `seed` at every start.

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `start` | in | 1 | one-clock start pulse |
| `a_in` | in | 512 | input curve coefficient A, plain (not Montgomery) form; 0 for the base curve |
| `private_key` | in | 74 × 4 | signed exponents e_i in [−5, 5]; hold until `done` |
| `seed` | in | 64 | PRNG seed |
| `a_out` | out | 512 | result A′, plain form, valid from `done` |
| `busy`, `done`, `success`, `fault` | out | 1 | status; `done` pulses once |

The main parameters:

| Parameter | Default | Meaning |
|---|---|---|
| `NW` | 16 | words of 32 bits |
| `P`, `PINV`, `R2`, `MONE` | CSIDH-512 | prime and its Montgomery constants |
| `NPRIMES`, `PRIMES` | 74, CSIDH-512 list | prime count and list |
| `EMAX` | 5 | isogenies per prime |
| `BATCH` | 16 | primes per batch |
| `MUL_CYC` | 1 | 1 = DSP multiplier, 2 = Booth multiplier |
| `MASK` | 1 | random operands for idle ALU units |
| `VALIDATE` | 1 | final [p+1]P check |
| `FAULT_CHECK` | 1 | [l]K check in every isogeny |

The design can be built for another CSIDH prime by changing `P`, `PINV`, `R2`,
`MONE`, `NPRIMES`, `PRIMES` and `NW`. The testbenches run it at
p = 4·3·5·7·11·13·17 − 1 with two words.

### Measured cost

One complete CSIDH-512 key generation takes **65.4 million clocks** in
simulation. That run had 193 real and 177 dummy isogenies, 33 point retries
and 8 skipped kernels.

## 6. Verification

Every block has a self-checking testbench in `tb/`.

* The arithmetic benches compare against wide-integer arithmetic in
  SystemVerilog. They check the latencies quoted above: 22 and 23 for
  `mul512`, 71 for `mont_mul`, and 5 and 72 for the ALU.
* The curve-level benches use `tb/fe_env.svh`. It builds a small datapath with
  the real `cu_regfile` and `alu` for p = 1021019 (two 32-bit words), plus a
  reference model of x-only curve arithmetic and isogenies. They check:
  * ladder steps, scalar multiplications and isogenies (image curve and image
    point);
  * curve-or-twist decisions and inversions;
  * that operation counts do not depend on the data.
* The end-to-end benches check the results of the group action against values
  from an independent, variable-time model:
  * `tb_csidh_top` runs a toy system (6 primes, EMAX = 2, batches of 2): two
    public keys, both shared secrets (which must agree), rejected inputs, an
    ordinary curve that must fail validation, and a fault injected into the
    isogeny window that must be caught. A second instance in the ASIC configuration
    (`MUL_CYC` = 2, no masking, batches of 3) must compute the same public
    key. It counts each mechanism and fails if
    one never happens: real and dummy isogenies, isogenies in the twist phase,
    point retries, kernels at infinity, validation failure and fault detection.
  * `tb_csidh_top_full` runs one complete CSIDH-512 key generation at the
    default parameters. It matches the expected public key and takes about
    3 minutes in Verilator.

Running one bench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  -Irtl -Itb --top-module tb_csidh_top rtl/csidh_pkg.sv tb/tb_csidh_top.sv
obj_dir/Vtb_csidh_top
```

Each bench prints `TB_RESULT checks=N failures=M`.

Lint leaves two warning classes, which are left on purpose:

* `ALWCOMBORDER` on the carry chains, which are computed in a loop inside
  `always_comb`;
* `UNUSEDPARAM` for package constants a module does not use.

## 7. Where this design departs from the published architecture

* **Montgomery multiplication takes 71 clocks, not 87.** The published figure
  is not broken down. Here it is three multiplier passes plus 5 clocks of
  addition and reduction.
* **Key generation takes 6.5·10⁷ clocks against the published 1.03·10⁸
  (FPGA).** The operation schedule differs: products of primes are applied as
  chains of small ladders, and the overheads of the random points differ.
  The cycle count is therefore not a like-for-like comparison.
* **Point generation.** The published algorithm names an Elligator point
  generator. This design draws random x-coordinates and keeps those that
  `xtwist` places on the wanted side. The outcome is the same (a random point
  on the curve or the twist), but it costs a variable number of draws.
* **The constant-time variant is used everywhere.** The batch takes primes
  that still owe isogenies in the current direction. Steps for exponents
  already at zero are dummies, and every prime gets EMAX steps. The plain
  algorithm listing would instead select only primes with e_i ≠ 0.
* **[l_i]P is computed for real steps too** and discarded, so real and dummy
  steps are identical. The published text mentions it only for dummies.
* **The [l]K fault check also counts for dummy steps.**
* **Inversion uses Fermat's theorem** (Z^(p−2)), not a dedicated Montgomery
  inversion algorithm.
* **`xisog` does not overwrite the curve and point.** It writes separate
  outputs, and the controller commits them.
* **The PRNG is a plain xorshift generator.** It is not a cryptographic RNG.
  For real use, replace it with a true random source.
* **Not implemented:**
  * the pad ring and I/O multiplexing of the ASIC;
  * a CSIDH-1024 configuration. It would need a ~1024-bit prime (NW = 32) and
    about 130 primes, whose constants are not supplied.
