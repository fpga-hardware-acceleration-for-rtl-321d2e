# OLTAE: a fixed-point attitude-estimation core for point-cloud registration

Relative navigation with a LiDAR and a camera comes down to one question per
frame. Given n matched 3-D points `a_i` (previous frame) and `b_i` (this frame),
which rotation `R` and translation `t` satisfy `b_i = R a_i + t` best in the
weighted least-squares sense? The Optimal Linear Translation and Attitude
Estimator (OLTAE) answers it in closed form. This repository holds
SystemVerilog RTL for a hardware core that evaluates the attitude part of
OLTAE. It follows the hardware/software split of the FPGA-SoC accelerator
published by Bhaskara and Majji ("FPGA Hardware Acceleration for
Feature-Based Relative Navigation Applications"). The block structure, number
format, state machine and port names come from that publication. Everything
it leaves open was filled in for this RTL, and is marked as such below and in
each file's header.

## The algorithm the core evaluates

The attitude is written as a Gibbs vector (Classical Rodrigues Parameters) `q`,
with `R = (I + [q×])⁻¹ (I − [q×])`. Subtracting the centroids `ā`, `b̄` removes
the translation. For the centred points `δa_i`, `δb_i` define

    s_i = δb_i + δa_i          y_i = δb_i − δa_i

The rigid motion then becomes exactly linear in `q`: `y_i = s_i × q`. Stacking
all n equations and solving the normal equations gives a 3×3 problem,
whatever n is:

    M = Σ w_i ( s_iᵀs_i I − s_i s_iᵀ )      (= Hᵀ Σ⁻¹ H)
    v = − Σ w_i ( s_i × y_i )               (= Hᵀ Σ⁻¹ ỹ)
    q = M⁻¹ v

`w_i = 1/σ_i²` weights each measurement by its noise. The translation then
follows on the host as `t = b̄ − R ā`.

Only inner, outer and cross products of 3-vectors, two running sums, one 3×3
inverse and one matrix-vector product are needed. The hardware therefore does
not grow with the number of features. This is the reason the formulation
suits a small FPGA core.

## Division of work between host and core

| Host processor (not in this RTL)                   | Core (this RTL)                                   |
|----------------------------------------------------|---------------------------------------------------|
| feature matching, 2-D/3-D association              |                                                   |
| centroids, `s_i`, `y_i`                            |                                                   |
| weighting: multiply `s_i` and `y_i` by `1/σ_i`     |                                                   |
| scaling: `s' = α s`, `y' = β y`, rounding to Q15.16 |                                                   |
|                                                    | `sᵀs`, `s sᵀ`, `s × y` per measurement            |
|                                                    | accumulation of `M` and `v`                       |
|                                                    | `M⁻¹` by Cramer's rule, `q' = M⁻¹ v`              |
| `q = (α/β) q'`, attitude matrix, translation       |                                                   |

Weighting by `1/σ_i` on both vectors is this design's choice. It produces the
`1/σ_i²` factor in both sums, so the core needs no weight input. In the
published design the noise parameters also enter on the host side.

## Number format and scaling: the part to get right

Every word in the core is a 32-bit two's-complement Q15.16 number: 1 sign
bit, 15 integer bits and 16 fractional bits. That gives a range of ±32768 and
a resolution of 1.5·10⁻⁵.

- Products are taken at full 64-bit width, shifted right arithmetically by 16
  bits (rounding toward −∞) and truncated to 32 bits.
- Sums wrap.
- Quotients round toward zero and saturate at ±(2³¹−1).

The core never detects overflow. Keeping the numbers in range is the host's
job, and its scale factors α and β are what make the core work.

- **Too small, and resolution is lost.** Once `s'` and `y'` are around 0.05,
  the products are only a few hundred LSBs. Errors of tens of percent then
  appear in `q`.
- **Too large, and the core overflows.** The determinant grows as the cube of
  the entries of `M`, and the cofactors as their square. Both must stay below
  32768.

The testbenches scale each frame so that `Σ|α s_i|² = 8`, which puts the trace
of `M` at 16. They use β = 2α, which gains one more bit of resolution in `q'`.
With that rule the simulated attitude error stays below 10⁻⁴ for 3 to 64
features. The published design used one fixed scale for its whole data set
and reports deviations of up to 7 % from a double-precision reference.

## Data path

```
 vec_in ─► assemble 3 words ─► hold ─┐            ┌─► sᵀs ──┐
                                     ├─ fire ─► s ┼─► s sᵀ ─┴─► sᵀs·I − s sᵀ ─► M buffer (+=) ──┐
 y_in ───► assemble 3 words ─► hold ─┘       y ───┴─► s × y ─────────────────► v buffer (−=) ─┐ │
                                                                                               │ │
          data_out ◄── 3 words ◄── matvec (3 MACs, systolic) ◄── M⁻¹ ◄── Cramer's rule ◄───────┘─┘
```

- **Input collection** (`oltae_core`): each stream has a 3-word assembly
  register and a one-vector holding register. A measurement moves on when both
  holding registers are full. The two streams may be up to three words apart.
  The core ignores words beyond 3n. An assertion flags a holding register
  being overrun.
- **Products** (`vec_inner_product`, `vec_outer_product`,
  `vec_cross_product`): fully parallel multipliers with one register stage.
  They accept a new measurement every cycle.
- **Addition** (`matrix_add`): `sᵀs` on the diagonal plus the negated outer
  product, with one register stage.
- **Accumulation** (`accumulation`): two buffers, nine words for `M` and three
  for `v`. The `v` buffer subtracts, which carries the minus sign of the
  estimator. It also counts the terms it has taken.
- **Inverse** (`matrix_inverse`): a cofactor stage, a determinant stage, then
  nine divisions `adj[r][c] = C[c][r]`, each shifted up 16 bits and divided by
  `det`. They are issued one per cycle into a single pipelined divider
  (`fx_divider`: radix-2 restoring, 48 stages, one result per cycle, tagged).
  It reports done 61 cycles after start.
- **Matrix-vector product** (`matvec_mult`): three MAC units (`mac_unit`), one
  per output row. The vector elements enter processing element (PE) 0 one per
  cycle and shift one PE further each cycle, so PE i multiplies `x[j]` at cycle
  i + j. This is the nearest-neighbour, skewed schedule of a systolic array. It
  reports done 6 cycles after start.
- **Output**: the three words of `q'` (x, y, z) leave on `data_out` on three
  consecutive cycles with `data_out_valid`.

### Timing

The clock edge that takes the last input word is followed, 77 edges later, by
the edge that takes the first result word:

| Stage                                                  | Edges |
|--------------------------------------------------------|-------|
| collector, product, adder and accumulator stages       | 4     |
| controller starts the inverse                          | 1     |
| inverse, until its done is sampled (61 cycles + 1)     | 62    |
| controller starts the matrix-vector unit               | 1     |
| matrix-vector unit, until its done is sampled (6 + 1)  | 7     |
| controller enters the output phase                     | 1     |
| first result word taken                                | 1     |
| **total**                                              | **77** |

With the input streams at full rate, a whole estimate takes about 3n + 80
cycles. At 100 MHz that is 1.4 µs for 20 features. The published figure of
1.7 µs (170 cycles) matches n ≈ 30, but the publication does not state n.
Through the AXI4-Lite registers, each input word costs one bus write, so the
host's bus traffic dominates the time.

## Control

`oltae_ctrl` implements the three-state machine of the published core. The
COMPUTE sub-phases are this design's own:

```
IDLE ──start=1──► COMPUTE ──done──► DONE ──start=0──► IDLE
 ↺ start=0          │                ↺ start=1
                    ├ ACCUM  : read measurements until n are accumulated
                    ├ INV    : Cramer's-rule inverse
                    ├ MATVEC : q' = M⁻¹ v
                    └ OUT    : three result words, then DONE
```

Entering COMPUTE clears both buffers and the input collectors. DONE holds, and
`done` stays high, until the host lowers start. That handshake is how the host
"resets the core for the next cycle".

## Register map (`oltae_axi_regs`, AXI4-Lite, 32-bit)

| Offset | Name     | Access | Content                                                  |
|--------|----------|--------|----------------------------------------------------------|
| 0x00   | CTRL     | RW     | bit 0: start                                             |
| 0x04   | NUM_MEAS | RW     | n, number of measurements (≥ 3)                           |
| 0x08   | VEC_IN   | W      | each write sends one word of `s'` (x, y, z per measurement) |
| 0x0C   | Y_IN     | W      | each write sends one word of `y'`                        |
| 0x10   | STATUS   | R      | [1:0] state (0 IDLE, 1 COMPUTE, 2 DONE), [2] done, [3] reading data |
| 0x14–0x1C | Q0–Q2 | R      | result `q'`, Q15.16                                      |

Handshake timing:

- A write is taken when AWVALID and WVALID are both high and no write response
  is pending. BVALID follows one cycle later.
- A read is taken when ARVALID is high and no read data is pending. RVALID
  follows one cycle later.
- Write strobes are ignored.
- Responses are always OKAY.
- Assertions check that BVALID and RVALID (with RDATA) hold until they are
  accepted.

Programming sequence for one estimate:

1. Write NUM_MEAS.
2. Write CTRL = 1.
3. Poll STATUS until bit 3 is set.
4. Write the 3n words to VEC_IN and the 3n words to Y_IN, in any interleaving
   that keeps the two streams within three words of each other.
5. Poll STATUS until bit 2 (done) is set.
6. Read Q0 to Q2.
7. Write CTRL = 0.

## Files

| File                        | Content                                          |
|-----------------------------|--------------------------------------------------|
| `rtl/oltae_pkg.sv`          | Q15.16 types, vector/matrix types, state enums, `fxmul` |
| `rtl/oltae_top.sv`          | top: register file plus core                     |
| `rtl/oltae_axi_regs.sv`     | AXI4-Lite register file                          |
| `rtl/oltae_core.sv`         | the core: input collection, data path, output    |
| `rtl/oltae_ctrl.sv`         | IDLE/COMPUTE/DONE controller                     |
| `rtl/vec_inner_product.sv`, `vec_outer_product.sv`, `vec_cross_product.sv` | per-measurement products |
| `rtl/matrix_add.sv`         | 3×3 adder                                        |
| `rtl/accumulation.sv`       | the two accumulation buffers                     |
| `rtl/matrix_inverse.sv`     | Cramer's-rule 3×3 inverse                        |
| `rtl/fx_divider.sv`         | pipelined signed divider                         |
| `rtl/matvec_mult.sv`, `mac_unit.sv` | systolic matrix-vector product           |
| `tb/oltae_ref_pkg.sv`       | bit-exact model of the core's arithmetic, and the synthetic data generator |
| `tb/tb_*.sv`                | one self-checking testbench per module           |

## Verification

Each testbench drives its module and compares the outputs with values it
works out independently. It prints `TB_RESULT checks=N failures=M` and has a
watchdog. The reference package holds two independent models:

- a bit-exact model of the fixed-point arithmetic, which the data path must
  match word for word;
- a real-valued generator of synthetic scenes. It takes a known rotation and
  translation, draws random terrain-like points, computes their images, and
  forms the weighted and scaled `s'` and `y'`. The core's result must then
  match the true attitude.

What the larger tests cover:

- `tb_oltae_core`: 12 estimates with n from 3 to 64. The input streams run in
  four patterns: in step, skewed by one word, with random gaps, and with
  excess words after the n-th measurement. It also checks the 77-cycle latency,
  the read window, the DONE hold and the return to IDLE.
- `tb_oltae_top`: the end-to-end test, run at the default parameters. It
  models a landing sequence of 25 frames, all through the AXI4-Lite port:
  - constant-rate rotation about one axis, 1° per frame, up to 25°;
  - constant-velocity translation along two axes;
  - 20 features per frame.
  Every result must be bit-exact. In simulation the largest attitude error is
  about 6·10⁻⁵. The test counts each control mechanism and requires each to
  have occurred.
- The unit tests also check the latencies: products and adder 1 cycle,
  divider 50, inverse 61, matrix-vector 6. The inverse is also checked
  numerically (`M·M⁻¹ ≈ I`).

To simulate with Verilator 5, for example the top-level test:

```
verilator --binary --timing --assert --top-module tb_oltae_top \
    -y rtl -y tb +libext+.sv rtl/oltae_pkg.sv tb/oltae_ref_pkg.sv tb/tb_oltae_top.sv
./obj_dir/Vtb_oltae_top
```

Any other testbench runs the same way with its own name. Verilator is a
two-state simulator, so every register that is read is reset.

## Where this RTL departs from, or adds to, the published design

- **Divider.** The published core uses the FPGA vendor's divider IP.
  `fx_divider` is a plain replacement with the same role: pipelined, one
  division per cycle. Its latency (50 cycles) and rounding are this design's.
- **Systolic matrix multiplier.** The publication mentions a 2-D systolic array
  of MACs for matrix multiplication. The estimator itself contains no
  matrix-matrix product, so no 2-D array is built. The matrix-vector unit uses
  the same systolic principle with the three MACs of the block diagram.
- **Memory port.** The core's AXI port to DDR memory appears in the block
  diagram only by name and has no described function. It is not built.
- **Interface details.** The following are all this design's choices:
  - the register map and the AXI4-Lite protocol (the publication says "AXI4");
  - the meaning of `rdDataEn`, taken as the core signalling that it is reading
    data;
  - the word order on the streams;
  - the one-vector skew buffer;
  - the `done` output of the top;
  - the COMPUTE sub-phases.
- **Weights.** The weights are folded into the inputs by the host, not applied
  in the core.
- **Timing.** The core's cycle counts are this design's. They are consistent
  with, but cannot be checked against, the published 1.7 µs.
- **Resources.** The published implementation used 137 DSP slices, 5545 LUTs
  and 7597 flip-flops on a Zynq-7020. This RTL was not mapped to that device.
  Its multiplier count (3 + 9 + 6 in the product units, 27 for cofactors and
  determinant, 3 MACs) is of the same order.

## Changing the design

- `CNT_W` sets the largest n.
- The number format lives in `oltae_pkg` (`DATA_W`, `FRAC_W`). The divider
  width follows it as `DATA_W + FRAC_W`.
- Two changes are natural extensions: a second divider, to cut the inverse
  latency, and overflow flags on the accumulators, to warn the host when its
  scale is too large.
