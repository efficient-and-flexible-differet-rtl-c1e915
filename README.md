# DRMMM: a different-radix Montgomery multiplier

Montgomery multiplication computes `Z = A·B·R⁻¹ mod M` one k-bit digit of `A` at a time. Each iteration adds `aᵢ·B`, then adds `q·M`, where the quotient digit `q` is picked so that the low k bits become zero. Then it shifts right by k. In the textbook loop, `q` depends on the value the same iteration has just formed. The chain "add `aᵢB` → compute `q` → add `qM`" therefore sits inside every clock cycle, and once the additions themselves are made carry-free it is the critical path.

This design removes `q` from that path. Two changes make it possible:

* **The multiplier digit enters t digits higher.** Each iteration adds `aᵢ·B·rᵗ` instead of `aᵢ·B` (r = 2ᵏ). The low t digits of the running value then depend only on quotient digits, never on the newest `aᵢ`.
* **The quotient is computed in radix rᵗ, one digit per iteration, through a t-stage pipeline.** A digit started from the running value of iteration i is used in iteration i+t−1.

The running value is kept as three full-length terms `Z0 + Z1 + Z2`, so no carry propagates inside the loop. A small carry module recovers the two carry bits that the right shift would otherwise drop.

The RTL implements the main instance of the method: a 1024-bit modulus, k = 16 (radix 2¹⁶) and t = 4. One iteration runs per clock, and a multiplication takes 72 cycles from `start` to `done`. The sub-blocks are built the way an FPGA mapping wants them: 6-to-3 counters that fit one LUT6 per output bit, and window-indexed tables of precomputed multiples of M and M′ in place of multipliers. Everything is parameterised.

## 1. The arithmetic

Let `d = ⌈N/k⌉` and `M′ = −M⁻¹ mod r^t` (M odd). The loop runs d+t iterations, i = 0 … d+t−1, with `aᵢ = 0` for i ≥ d:

```
Z(i)  = ( Z(i−1) + aᵢ·B·rᵗ + q_use(i)·M ) / r          (exact division)
q_new = ( (Z(i−1) mod rᵗ) · M′ mod rᵗ ) >> k(t−1)     (becomes q_use(i+t−1))
```

**Why the late quotient is still right.** When `q_new` is started, t−1 earlier digits are still in flight. Call their weighted sum `P`. By induction, `Z(i−1) + P·M ≡ 0 (mod r^(t−1))`. The t-digit product `Q = (Z(i−1) mod rᵗ)·M′ mod rᵗ` is the unique t-digit number with `Z(i−1) + Q·M ≡ 0 (mod rᵗ)`. Its low t−1 digits are therefore exactly `P`, and its top digit is the digit that iteration i+t−1 needs. The partial products `aⱼ·B·rᵗ` added in between are multiples of rᵗ and leave those low digits alone.

**Loop count and result.** After d+t iterations, `Z·r^(d+t) = A·B·rᵗ + Q_tot·M`, so `Z ≡ A·B·r^(−d) (mod M)`. Both terms on the right are below `M·r^(d+t)`, so `Z < 2M`. One conditional subtraction of M finishes the job.

**Widths.** Before the shift, the running value stays below `(r^(t+1)+r)·M·r/(r−1) < 2^(N+k(t+1)+1)`. Each of the three terms is therefore `W = N + k(t+1) + 1` bits (1105 by default). All vectors in the compressor are nonnegative, and each is bounded by their exact sum. So truncating every compressor output to W bits never drops a one bit.

Operands and result use the usual Montgomery domain with `R = 2^(kd)`: feeding `A·R mod M` and `B·R mod M` returns `A·B·R mod M`.

## 2. One iteration: `z_update`

The triplet register holds the three terms as they leave the compressor, before the shift. In each clock, four groups of vectors are gathered:

| source | vectors | note |
|---|---|---|
| shifted triplet `Zj >> k` | 3 | |
| shift carry `{C_m, C_l & ~C_m}` | 1 | value 0, 1 or 2 |
| partial products of `aᵢ·B << kt` (`pp_generator`) | k = 16 | bit j of aᵢ gates `B << (kt+j)` |
| `q·M` terms from the quotient pipeline | ⌈k/w⌉ = 4 | w = 4 windows of the digit |

These 24 vectors go through a tree of 6-to-3 counters, 24 → 12 → 6 → 3 (`compressor_tree`), and back into the register. On an FPGA that is one LUT level for the partial products, the carry module and the `qM` lookup, plus three counter levels: four LUT delays per iteration.

**The 6-to-3 counter (`compressor63`).** For each bit position it outputs the 3-bit count of ones among six inputs. O0 is the XOR of the six bits, O1 the XOR of the 15 pairwise ANDs, and O2 the XOR of the 15 four-input ANDs. Each output depends on six bits only, so it is a single LUT6. Two cascaded carry-save adders would do the same job with two LUT levels.

**The carry module (`carry_module`).** After compression, the low k bits of the three terms sum to 0, 2ᵏ or 2ᵏ⁺¹, because the quotient digit made them a multiple of 2ᵏ. Which of the three it is can be read from bits k−1 and k−2 alone:

* `C_l` = OR of those six bits.
* `C_m` = 1 when three of the bits k−1 are set, when two are set together with at least one bit k−2, or when one is set together with all three bits k−2.

The carry is `C_l + C_m`. Both bits are LUT6 contents: `0xFFFFFFFFFFFFFFFE` for `C_l` and `0xFFFEFE80FE808000` for `C_m`. LUT inputs I5..I3 are the three bits k−1, and I2..I0 are the three bits k−2. The carry enters the next compression as one small vector, and the first quotient stage sees it too.

An assertion in `z_update` checks on every iteration that the low k bits of the new triplet vanish modulo 2ᵏ.

## 3. The quotient pipeline: `q_pipeline`

With k = 16, t = 4, w′ = 6 and w = 4, one stage runs per iteration, with a register after each of the first three stages:

1. **iM′ encoding.** The low 64 bits of each of the three shifted terms are cut into eleven 6-bit windows. Each window looks up `i·M′ mod 2⁶⁴`, shifted to the window's weight. That gives 33 terms. The carry adds a 34th term, `c·M′`, read from the same table. Two counter levels then reduce 34 → 18 → 9 vectors.
2. **Compression to two vectors.** Two counter levels and a carry-save adder reduce 9 → 6 → 3 → 2.
3. **Addition.** A 64-bit addition gives `Q`. Its top 16 bits are the new digit.
4. **iM encoding.** The digit's four 4-bit windows look up `i·M` and are shifted into place. This stage is not registered: its four `qM` terms go straight into the update compressor of the same iteration.

The pipeline registers are cleared at the start of each multiplication, so the first t−1 digits used are 0. The placement also works for other values of t: for t = 3, stages 1 and 2 share a cycle; for t = 2, stages 1–3 do; for t > 4, extra delay registers follow stage 3. The pipeline always holds exactly t−1 registers.

## 4. Tables of multiples: `precomp_table`, `lut_encode_layer`

`lut_encode_layer` is the lookup itself. Window j of the input selects table entry `xⱼ`, which is shifted left by `WIN·j` and truncated. The outputs sum to `x·V`.

`precomp_table` holds the table `{i·V}`. With a fixed modulus these entries would be constants, folded into LUT INIT values. Here the modulus is a run-time input instead. A `mod_load` pulse starts an accumulator that writes one entry per clock. The iM table (16 entries of N+4 bits) and the iM′ table (64 entries of 64 bits) fill in parallel, and `mod_ready` rises after 63 cycles. The host supplies `M′ = −M⁻¹ mod 2⁶⁴` alongside M. It costs a few lines of software, for example Newton's iteration `x ← x·(2 − M·x)` started from `x = M`.

## 5. Final summation and reduction: `final_reduction`, `prefix_adder`

After the last iteration, `Z = Y0 + Y1 + Y2 + C_l + C_m` is below 2M, so all arithmetic here is on N+2 bits. It takes three registered steps:

1. A carry-save adder reduces the three terms to two. `C_l` fills the empty bit 0 of the carry vector, and `C_m` becomes the carry-in of the next step.
2. A Kogge-Stone prefix adder forms Z.
3. A second prefix adder forms `Z − M`, and its sign selects the result.

These are the only carry-propagating additions wider than 64 bits in the design, and they sit outside the loop.

## 6. Interface and timing (`drmmm_top`)

| port | dir | width | |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | rising edge; synchronous active-low reset, during which `ready` and `done` stay low |
| `mod_load` | in | 1 | one-cycle pulse with `mod_m`, `mod_mp` |
| `mod_m` | in | N | odd modulus M |
| `mod_mp` | in | k·t | −M⁻¹ mod 2^(kt) |
| `mod_ready` | out | 1 | tables filled (63 cycles after `mod_load`) |
| `start` | in | 1 | one-cycle pulse with `a_in`, `b_in`; taken when `ready` |
| `a_in`, `b_in` | in | N | operands, below M |
| `ready` | out | 1 | idle and tables ready |
| `done` | out | 1 | one-cycle pulse; `z_out` valid |
| `z_out` | out | N | A·B·2^(−kd) mod M, fully reduced |

The sequence of one multiplication:

* The `start` cycle clears the triplet and the pipeline and latches A and B.
* The d+t iterations follow, one per clock.
* The final reduction adds one cycle to start and three to compute.

`done` comes exactly **d + t + 4 cycles** after `start`: 72 cycles for N = 1024, k = 16, t = 4. A new `start` can be given in the cycle after `done`. `drmmm_ctrl` is the state machine behind this (idle, run, final-start, final). Assertions flag a `start` while not ready and a `mod_load` during a multiplication.

## 7. Where this RTL departs from the published design

* **Loop count and latency.** The published algorithm writes the loop as `i = 0 … d+t` and uses the digit `t` iterations after it is started. The RTL uses each digit t−1 iterations after it is started, which is what t−1 pipeline registers give, and runs d+t iterations. That is the count the proof in §1 needs. The published cycle count for this instance is 74; this RTL takes 72. The difference lies in the unpublished split of the start and final cycles.
* **The 6-to-3 counter's top bit.** The published formula joins the four-bit products of O2 with AND. Only XOR gives bit 2 of the count, so XOR is built.
* **The `C_l` LUT constant** is printed with missing digits. It is rebuilt from its definition as the OR of six bits. The LUT input order for both LUTs was chosen so that the printed `C_m` constant matches the printed case list.
* **Run-time modulus.** The published design embeds a fixed modulus in LUT contents. Here the tables are registers filled after `mod_load`. The lookup structure is unchanged.
* **Own choices where nothing is specified:**
  * the handshake;
  * the term width margin (+1 bit);
  * where the carry enters the two compressors;
  * the 9 → 2 tree shape;
  * Kogge-Stone for the prefix adder;
  * the three-cycle final reduction;
  * register placement for t ≠ 4.
* **Not built.** The published radix-4 variant uses 4×4 sub-multipliers from other work and a merged q/qM table. It is a second instance and is not built. The top does accept `K = 4`, with the array-multiplier datapath.
* **Carry value 2.** In every end-to-end simulation of this instance, the low bits of the triplet never summed to 2ᵏ⁺¹, so `C_m` was never 1 there. The case is possible for some bit patterns, and the carry module handles it. Its own testbench drives it directly.

## 8. Files

`rtl/`:

| file | contents |
|---|---|
| `drmmm_pkg.sv` | default sizes; helpers for term widths and compressor-tree vector counts |
| `drmmm_top.sv` | top level (§6) |
| `drmmm_ctrl.sv` | sequencer |
| `z_update.sv` | triplet update (§2) |
| `q_pipeline.sv` | quotient pipeline (§3) |
| `pp_generator.sv` | partial products of `aᵢ·B << kt` |
| `carry_module.sv` | shift carry bits |
| `compressor63.sv` | 6-to-3 counter |
| `compressor_tree.sv` | counter trees |
| `csa32.sv` | carry-save adder |
| `precomp_table.sv`, `lut_encode_layer.sv` | tables of multiples and window lookup (§4) |
| `prefix_adder.sv`, `final_reduction.sv` | final summation and reduction (§5) |

`tb/` holds one self-checking testbench per module, `tb_<module>.sv`, plus `tb_drmmm_configs.sv` and its helper `drmmm_run.sv`. Each prints `TB_RESULT checks=N failures=F` and stops itself with a watchdog.

## 9. Verification

Each testbench compares its block with an independent computation: plain wide-integer arithmetic in the testbench.

* **Top, full size.** `tb_drmmm_top` runs the default 1024-bit instance end to end:
  * five moduli, including all-ones and a modulus shorter than 1024 bits;
  * nine multiplications per modulus, back to back, with random and corner operands (0, 1, M−1);
  * each result checked as `Z < M` and `Z·2^(kd) ≡ A·B (mod M)`;
  * latency checked to be exactly 72 cycles;
  * mechanism counts: a shift carry, a final subtraction both taken and skipped, modulus reloads and nonzero quotient digits must each occur.
* **Other configurations.** `tb_drmmm_configs` runs five further instances side by side, each driven and checked by the helper `tb/drmmm_run.sv`:
  * a 1024-bit instance with k = 4, t = 4, taking 264 cycles;
  * 256-bit instances with k = 16 and t = 2, 3 and 6, which cover every register placement of the quotient pipeline;
  * a 250-bit modulus with k = 8, t = 3.
* **`tb_q_pipeline`** checks the digit timing with random stalls, for t = 4 and t = 2.
* **`tb_z_update`** checks the exact shifted sum of every iteration.
* **The arithmetic blocks** are checked exhaustively or with random vectors against `+` and `*`.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb rtl/drmmm_pkg.sv tb/tb_drmmm_top.sv --top-module tb_drmmm_top -o sim
./obj_dir/sim
```

The full-size test builds in about half a minute and runs in well under a second.

## 10. Changing the parameters

`drmmm_top` takes `N`, `K`, `T`, `WM` (iM window) and `WMP` (iM′ window). Limits:

* T ≥ 2, K ≥ 2 and WMP ≥ 2.
* `mod_mp` must be −M⁻¹ mod 2^(K·T).
* The two tables hold 2^WM and 2^WMP entries, and reloading them takes 2^WMP − 1 cycles.
* For a different t, the first-stage split (two counter levels) stays as it is. Whether a stage still fits the iteration's delay depends on the target; only the t = 4, k = 16 split is balanced for the four-LUT iteration.
