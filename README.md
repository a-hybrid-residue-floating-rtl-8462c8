# HRFNA: a hybrid residue / exponent arithmetic core

A number in this core is an integer times a power of two, `X = N · 2^f`. This is the
floating-point idea, but `N` is not stored in binary. `N` is held as its remainders
(residues) modulo three small, pairwise coprime moduli.

In that form, multiplying two integers is three independent 12-bit modular
multiplications with no carry between them. The exponents are added in a separate,
narrow pipeline. Together they give one multiplication per clock with a short, regular
critical path.

Residue arithmetic has a cost: it cannot see how large a number is, and it silently
wraps around at the product of the moduli. The core therefore watches every result.
When a result's integer part grows past a threshold, the core stops the pipeline for a
few cycles. During that stop it:

1. reconstructs the integer with the Chinese Remainder Theorem (CRT);
2. divides it by `2^k` with rounding;
3. re-encodes it into residues;
4. adds `k` to the exponent.

The growth is kept in bounds by this rare normalization step, not by the rounding and
normalization that a floating-point unit does on every operation.

This RTL implements the architecture described in "A Hybrid Residue–Floating Numerical
Architecture for High Precision Arithmetic on FPGAs" (HRFNA) as a streaming core:
- operand pairs go in on AXI4-Stream;
- results come out on AXI4-Stream;
- configuration and status are on AXI4-Lite.

That publication gives the structure, the pipeline depths and the latencies. Many details
(the threshold test, the rounding, the register map, the stall rules) are not given there.
They were chosen here, and the section "Where this RTL departs from the published
architecture" lists them.

---

## 1. The number format

| Item | Value |
|---|---|
| Moduli `m0, m1, m2` | 4093, 4095, 4091. They are pairwise coprime and each fits in 12 bits. |
| Dynamic range `M = m0·m1·m2` | 68 568 575 985, just under 2^36 |
| Integer part `N` | signed, `-(M-1)/2 ≤ N ≤ (M-1)/2`, about ±3.4·10^10 |
| Stored residues | `r_i = N mod m_i`. A negative `N` is stored as `M + N`, the usual signed RNS convention. |
| Exponent `f` | 10-bit two's complement, −512 … 511 |

Word layouts (packed structs in `hrfna_pkg`):

```
hybrid_t      [45:34] r[2] (mod 4091)  [33:22] r[1] (mod 4095)  [21:10] r[0] (mod 4093)  [9:0] f
hrfna_req_t   [92] op (0 = multiply, 1 = add)   [91:46] x   [45:0] y
hrfna_flags_t [2] normalized   [1] exponent saturated high   [0] exponent saturated low
```

Why 4093/4095/4091? These are the moduli the publication uses. Each is `2^12 − c` with
`c` = 3, 1, 5. That small `c` is what makes the modular reduction cheap (section 3).

Software encoding of a value:
1. Choose `f`.
2. Round `N = value / 2^f`.
3. Store `N mod m_i`, or `(M + N) mod m_i` when `N` is negative.

The testbench package `tb/hrfna_tb_pkg.sv` has `ref_encode` and `ref_decode` functions
that do exactly this.

## 2. What the core computes

Each accepted request produces one result, in order.

**Multiply (`op = 0`)**
- The integer part is `N_z = N_x · N_y`, computed per channel as `r_x,i · r_y,i mod m_i`.
- The exponent is `f_z = f_x + f_y − bias`.
- `bias` is the EXP_BIAS register (0 after reset). It lets software work with biased
  exponents.

**Add (`op = 1`)**
- The result is aligned to the smaller exponent `e = min(f_x, f_y)`:
  `N_z = N_x·2^(f_x−e) + N_y·2^(f_y−e)`, and `f_z = e`.
- The operand with the larger exponent is shifted left by `d = |f_x − f_y|`.
- In residue form a left shift is a multiplication by `2^d mod m_i`, which is exact. So
  the add goes through the same multiplier as a product: `(a·b + addend) mod m_i`, with
  `b = 2^d mod m_i` and `addend` = the other operand's residues.
- `d` must be below 36. A larger gap raises `m_axis_talign_ovf` next to the result, and
  that result has no meaning.

**Normalization**
- If the resulting `|N_z|` reaches the threshold `τ ≈ α·M`, the result becomes
  `N_z' = round(N_z / 2^k)` and `f_z' = f_z + k`, with `normalized` set in TUSER.
- With the defaults (`α = 2^-19`, `k = 18`): `τ ≈ 130 784`, and one normalization brings
  any legal `N` back to about `τ` or below.

**The caller's rule: nothing checks for wrap-around.**
- A product or aligned sum whose true value exceeds `(M−1)/2` in magnitude wraps modulo
  `M` and is wrong. No hardware can tell.
- The defaults are chosen so that the rule is easy to meet. If both operands of a
  multiplication have `|N| < τ`, then `|N_x·N_y| < τ² ≈ 1.7·10^10 < (M−1)/2`.
- Every result leaves the core with `|N|` at about `τ` or below. Results can therefore be
  fed back as operands indefinitely without wrapping. Section 7 covers the precision
  that this leaves.
- For additions the caller must keep `|N|·2^d` in range.

**Exponent saturation**
- An exponent outside −512 … 511 saturates and sets the overflow or underflow flag.
- An operand exponent already at a limit keeps the result at that limit.

## 3. Residue channels and the modular multiplier (`mod_mult`, `residue_pipeline`)

Each channel computes `(a·b + addend) mod m` in three registered stages:

| Stage | Name | What it does |
|---|---|---|
| 1 | multiply | `p = a·b + addend`, at most 24 bits. This maps onto one DSP multiplier with its post-adder. |
| 2 | reduction prep | `m = 2^12 − c`, so `2^12 ≡ c (mod m)`. Writing `p = hi·2^12 + lo` gives `p ≡ hi·c + lo`. Two such folds bring any 24-bit `p` below `2·m`. Each fold is a small constant multiply (×1, ×3 or ×5) and an add. |
| 3 | subtractor | subtract `m` once if the prepared value is `≥ m` |

`residue_pipeline` puts an operand register in front of three such channels and an
output register behind them: 5 stages, one result per cycle. The channels share only
their valid bit and the global stall.

## 4. Knowing when a number is too big (`threshold_detect`)

This is the least obvious part of the design. A residue triple gives no magnitude
directly, and a full CRT on every result would cost as much as the normalization engine.
The core uses the fractional form of the CRT.

With `M_i = M/m_i` and `y_i = M_i^{-1} mod m_i`:

```
t_i = r_i · y_i mod m_i                    (three more modular multiplications)
X / M = frac( t_0/m_0 + t_1/m_1 + t_2/m_2 )
```

`X` is the stored value in `[0, M)`. The identity holds because
`Σ t_i·M_i = X + q·M` for some integer `q`. Dividing by `M` gives `Σ t_i/m_i = X/M + q`.

In hardware:
- `1/m_i` becomes the constant `K_i = ceil(2^48 / m_i)`.
- The sum `est = Σ t_i·K_i`, taken modulo 2^48, is a 48-bit fixed-point estimate of `X/M`.
- Each `K_i` is too large by less than one unit of 2^-48. With `t_i < 2^12` the estimate
  is therefore at most about 3·4095 units too large, which is about 3 in terms of `N`.
- No table lookup, no comparison of residues, and no wide subtraction is needed.

Since `N ≥ 0` gives `X = N` and `N < 0` gives `X = M + N`, the result is flagged for
normalization when both hold:

```
est ≥ α        (N ≥ 0 side:  N/M ≥ α)
2^48 − est ≥ α (N < 0 side: |N|/M ≥ α)
```

`α` is a 48-bit register value in units of 2^-48 (reset `2^29`, so `τ = M/2^19`). The
estimate's error only moves the trigger point by a few units of `N` around `τ`. This
never matters for correctness, because either decision leaves a valid result. The
testbenches accept either decision inside that band.

The detector has 4 stages: 3 for the `t_i` multipliers and 1 for the estimate and the
comparisons. The residues travel beside it in a delay line, so the result is still
available in residue form when the decision is made.

## 5. Normalization engine (`norm_engine` = `crt_engine` → `scaling_unit` → `reencode_unit`)

The engine takes one number and returns it 6 cycles later.

**CRT reconstruction (4 cycles)**
- It uses the same `t_i = r_i·y_i mod m_i` as section 4 (three `mod_mult`s).
- It then forms `Σ t_i·M_i` (36-bit constants, sum below `3M`) and subtracts `2M` or `M`.
- The result is `X ∈ [0, M)`.
- The constants `M_i`, `y_i` and `K_i` are computed at elaboration by functions in
  `hrfna_pkg` (extended Euclid for the inverses). No tables are stored.

**Scaling (1 cycle)**
- `X` is read as signed: `N = X` if `X ≤ (M−1)/2`, otherwise `X − M`.
- Then `N' = (N + 2^(k−1)) >>> k`: rounding half up on an arithmetic shift.
- The exponent `f + k` is formed here and saturates at 511 with the overflow flag.

**Re-encoding (1 cycle)**
- `|N'| mod m_i` is computed by repeated 12-bit folding, as in section 3.
- A negative `N'` becomes `m_i − (|N'| mod m_i)`.

Control: a small FSM (IDLE → BUSY → DONE). In DONE the result is held until the
scheduler acknowledges it. `stall_req` is high whenever the engine holds work.

## 6. The scheduler: how a normalization fits into a II = 1 pipeline (`pipeline_scheduler`)

Every pipeline register in the residue, exponent and threshold paths has one shared
enable, `adv`. The scheduler drives `adv` and the input `TREADY`, using a four-state FSM.

| State | Meaning | `adv` | `TREADY` |
|---|---|---|---|
| IDLE | nothing in flight; an offered pair (with the core enabled) moves the FSM to EXECUTE | 1 | 0 (the first pair is taken one cycle later, in EXECUTE) |
| EXECUTE | streaming; one pair accepted per cycle; back to IDLE when nothing is in flight or offered | 1 unless the output register is full and `m_axis_tready` is low, or a flagged item starts the engine | = `adv` (and enable) |
| NORMALIZE | the engine works on the item at the end of the threshold stage | 0 | 0 |
| RESUME | the engine result has just been loaded into the output register; the pipeline steps once to drop the normalized item from the threshold stage | 1 if the output can take data | = `adv` (and enable) |

Cycle picture, counting from the clock edge that accepts a pair:

```
edge  0   pair accepted (operand register, exponent offset register)
      5   residues leave the residue pipeline; exponent leaves its 1+4 stages
      9   threshold decision available
     10   result valid on m_axis   (fast path)
     16   result valid on m_axis   (when it was normalized: 10 + 6)
```

**The exponent offset.** The exponent path is one stage shorter than the residue path (4
against 5). A single register in front of it (`d = 1`) makes both arrive at the
threshold stage in the same cycle. An assertion in `hrfna_top` checks this lock-step.

**The cost of a normalization.** Results stay in order. While the engine works, the whole
pipeline and the input are frozen, so a normalization costs about 7 cycles of input.
Output backpressure freezes the core in the same way. A stalled pipeline loses nothing:
every stage keeps its data while `adv` is low.

`CTRL.enable = 0` stops new input from being accepted. Work in flight still completes.

## 7. Precision: what the fixed shift costs

A normalization always divides by the same `2^k`, however far the result is above `τ`:
- A result just above `τ` keeps only `log2(τ/2^k)` bits. With the defaults that is about
  0 bits.
- A result near the largest legal product (`τ²`) keeps about 16 bits.

This follows from the scheme itself, not from the RTL. The shift must be large enough to
bring the largest product back below `τ`, so it is much too large for a result that has
only just crossed `τ`. The format holds at most about 17 significant bits in any case,
because two operands must multiply without passing `(M−1)/2 ≈ 2^35`.

`tb_hrfna_chain` measures this. Every result is fed back as an operand. Each operation is
checked bit-exactly, and each value is checked against a rigorous error bound computed in
double precision.

**Repeated multiplication** `x ← x·c` with `c` ∈ (0.5, 1) held as a 17-bit integer:
- Nearly every product crosses `τ` and is shifted by 18 bits.
- `N` shrinks at each step until it is a single-digit integer. From then on the value no
  longer follows the true product.
- After 200 steps the relative error is over 10^6.
- With `k = 17` the chain instead freezes at a constant.

**An 8×8 matrix product of 16-bit entries** (products, then a tree of aligned additions):
- Sums that land just above `τ` are shifted by 18 bits.
- Some entries of C end up with an error of about 80 % of `Σ|a·b|`.

The hardware behaves exactly as specified in both runs. What fails is the numerical
claim that a threshold with a fixed shift keeps long computations accurate.

To use the core for real work, the caller has to manage the scale:
- encode operands with fewer bits (for example an 8-bit multiplier constant) so that
  products cross `τ` by a wide margin;
- or lower `k` through SCALE_K for addition-heavy phases, and keep the wrap-around rule
  of section 2 in mind.

## 8. Configuration and status (`axi_lite_config`)

AXI4-Lite slave with 5-bit byte addresses and 32-bit data. WSTRB is honoured per byte.
Responses are always OKAY.

| Addr | Name | Access | Meaning (reset value) |
|---|---|---|---|
| 0x00 | CTRL | rw | [0] enable (1) |
| 0x04 | ALPHA_LO | rw | α bits 31:0 (0x2000_0000) |
| 0x08 | ALPHA_HI | rw | α bits 47:32 (0) |
| 0x0C | SCALE_K | rw | [5:0] shift k (18) |
| 0x10 | EXP_BIAS | rw | [9:0] signed exponent bias subtracted from products (0) |
| 0x14 | NORM_COUNT | ro | normalizations performed |
| 0x18 | OP_COUNT | ro | results delivered |
| 0x1C | STATUS | ro | [1:0] scheduler state (0 IDLE, 1 EXECUTE, 2 NORMALIZE, 3 RESUME), [2] engine busy |

A change to α, k or the bias applies to items passing the relevant stage from then on.
Change them while the core is idle if every item of a batch must see the same settings.

**Choosing α and k.**
- Keep `τ² < (M−1)/2` if normalized results are multiplied together again.
- `k` should be large enough that one normalization brings a result back below `τ`.
- The defaults satisfy both.
- A smaller `α` normalizes more often and keeps more headroom. A smaller `k` loses less
  precision per normalization.

## 9. Top level (`hrfna_top`)

```
s_axis ─► alignment_logic ─► residue_pipeline (5) ─► threshold_detect (4) ─┬─► output_merge ─► m_axis
      └─► offset reg (1) ─► exponent_unit (4) ──► delay (4) ──────────────┤
                                                  norm_engine (6) ◄───────┘ (over threshold)
          pipeline_scheduler (adv, TREADY, start/ack)      axi_lite_config
```

`output_merge` is the single AXI4-Stream output register. It takes either the fast-path
result or the engine's result, never both in one cycle.

Extra outputs for monitoring:
- `sched_state`;
- `ev_norm_start`, a one-cycle pulse per normalization;
- `ev_mixed_op`, a pulse per accepted add with unequal exponents.

## 10. Where this RTL departs from the published architecture

**Stall during normalization.**
- The publication states in one place that the scheduler stalls the pipeline while the
  normalization engine is active.
- In another place it states that the stream handshake stays asserted through a
  normalization, "without bubbles".
- Both cannot hold for a single engine with a 6-cycle latency and in-order results. This
  RTL stalls: TREADY falls during NORMALIZE.

**Addition alignment.**
- The publication describes alignment as reconstructing an operand, shifting it and
  re-encoding it.
- Here the shift is an exact residue multiplication by `2^d`. That needs no
  reconstruction, but it limits `d` to 35.

**Threshold test.**
- The publication only says that magnitude estimates are derived from modular bounds.
- The fractional-CRT estimator, the signed interpretation and the α register format are
  this design's.

**Normalization depth.**
- The pipeline-depth table lists three engine stages (decode, scale, re-encode). The
  timing table gives a 6-cycle normalization latency.
- The three phases are kept and take 4 + 1 + 1 = 6 cycles.

**Constant storage.**
- The CRT constants are described as being in block RAM in one place and in LUT ROM in
  another.
- Here they are synthesis-time constants, which is equivalent to LUT ROM.

**Exponent unit.**
- The publication mentions a reduced floating-point format (FP16 or a 10-bit exponent
  with a 6-bit mantissa) for the scaling unit.
- Only the 10-bit integer exponent is built, because the exponent is an integer. There is
  no mantissa.
- The exponent increase of a normalization is done beside the scaling shifter, not in the
  exponent pipeline.
- The meaning of the "exponent offset" register (a bias on products) and saturation are
  choices made here.

**Rounding.** Round half up. The rounding mode is not specified.

**Output backpressure.**
- The publication says the pipelines advance every cycle outside normalization. It also
  says the scheduler issues backpressure when downstream stages fill up.
- Here a full output register with `m_axis_tready` low also freezes the core. Without
  that, results would have to be dropped.

**Where the threshold check sits.**
- The publication places overflow detection "within" the multiplication pipeline in one
  place. Its top-level diagram shows a separate branching and threshold stage after it.
- The separate stage is built here (4 cycles). Only overflow (large `|N|`) is detected.
  Small magnitudes are not flagged, because a small `N` loses no precision that scaling
  could recover.

**Where normalized results go.**
- The normalization flow is described as feeding re-encoded residues back into the main
  datapath.
- Here the normalized result goes to the output register (the "output merge" of the
  top-level diagram), in order with the other results. A result is normalized at most
  once.

**Moduli.**
- The theory section mentions small primes "near 250" as an example. The implementation
  section fixes 4093, 4095 and 4091.
- The latter are used. 4095 is not prime, but it is coprime to the other two, which is
  all the CRT needs.

**Not built**
- Comparison of hybrid numbers. It is mentioned in the theory only, with no hardware.
- Subtraction. Negate by encoding `−N`.
- The optional AXI4 memory-mapped buffer ports. They are only named.
- The host processor and the on-chip logic analyser, which are not part of the core.

**Not reproduced**
- The publication's clock rate (322 MHz on an UltraScale+ device) and its resource
  figures. They need vendor implementation.
- Its waveform examples, whose operand values are not given.

## 11. How far it can be trusted

Every module has a self-checking testbench in `tb/`:
- It compares against an independent model in plain integer arithmetic: brute-force
  modular inverses, direct `%`, and 64/128-bit CRT in the testbench package.
- It checks the cycle counts where a latency is specified: multiplier 3, residue pipeline
  5, exponent unit 4, CRT 4, engine 6, core 10 and 16.
- Each testbench has been run against a deliberately broken copy of its module and
  reports failures there.

The core testbench `tb_hrfna_top` runs the default configuration end to end:
- 200 back-to-back multiplications, checked for II = 1 and 10-cycle latency;
- an isolated normalization, checked for 16-cycle latency;
- 3 000 random mixed operations with additions, exponent gaps, exponent saturation and
  random output backpressure;
- a reconfiguration over AXI4-Lite (α = 2^27, k = 12, bias = 5);
- a disable/enable cycle;
- a read-back of the counters.

It also counts each mechanism (normalizations, stall cycles, mixed additions,
backpressure, every scheduler state, saturations) and fails if one never occurs.

`tb_hrfna_chain` runs chained workloads with results fed back as operands (section 7):
- 1 600 dependent products;
- an 8×8 matrix product, 960 operations in all.

Every operation is checked bit-exactly, and every value against an error bound in real
arithmetic.

What is not verified:
- timing closure and resource use on an FPGA;
- synthesis by a vendor tool;
- behaviour when the caller breaks the wrap-around rule (such a result is simply wrong).

Assertions check:
- the scheduler's one-load-per-cycle rule and engine start only when idle;
- AXI4-Stream output stability under backpressure;
- the AXI4-Lite response handshakes;
- the residue/exponent lock-step.

## 12. Simulating

Verilator 5 with `--timing` is needed (the testbenches use delays). From the repository
root:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/hrfna_pkg.sv tb/hrfna_tb_pkg.sv tb/tb_hrfna_top.sv \
    --top-module tb_hrfna_top -Mdir obj_top
./obj_top/Vtb_hrfna_top
```

Any other testbench is run the same way: replace `tb_hrfna_top` by e.g. `tb_crt_engine`.
The remaining modules are found through `-Irtl`. Each testbench prints
`TB_RESULT checks=<n> failures=<m>` and stops itself with a watchdog if it hangs. The core
testbench runs in well under a second.

To add `-Wall` lint, expect a few unused-bit warnings. There are also notes that `rst_n`
is used both as an asynchronous reset and inside assertion `disable iff` clauses.

## 13. Files

| File | Contents |
|---|---|
| `rtl/hrfna_pkg.sv` | widths, moduli, types, constant functions (CRT constants, modular inverse, folding reduction) |
| `rtl/mod_mult.sv` | one residue channel multiplier `(a·b + c) mod m`, 3 stages |
| `rtl/residue_pipeline.sv` | three channels with operand and output registers, 5 stages |
| `rtl/alignment_logic.sv` | operand selection and `2^d` table for additions |
| `rtl/exponent_unit.sv` | 4-stage exponent pipeline with saturation |
| `rtl/threshold_detect.sv` | fractional-CRT magnitude estimator, 4 stages |
| `rtl/crt_engine.sv`, `scaling_unit.sv`, `reencode_unit.sv`, `norm_engine.sv` | normalization engine |
| `rtl/pipeline_scheduler.sv` | IDLE/EXECUTE/NORMALIZE/RESUME FSM |
| `rtl/output_merge.sv` | AXI4-Stream output register |
| `rtl/axi_lite_config.sv` | register file |
| `rtl/pipe_delay.sv` | stallable delay line |
| `rtl/hrfna_top.sv` | the core |
| `tb/hrfna_tb_pkg.sv` | reference encode/decode/CRT/scale functions |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_hrfna_chain.sv` | chained workloads (iterative multiplication, matrix product) with real-valued error bounds |

To change the moduli, edit `MODULI` in `hrfna_pkg`. Each modulus must be above
`2^12 − 8` for the two-fold reduction to hold; `mod_mult` asserts this at elaboration. The
other constants follow automatically. Different word widths need `RES_W`, `M_W`, `N_W` and
the fold counts revisited.
