# Stochastic inner product with a central carry accumulator

This RTL computes an inner product z = x1·y1 + … + xK·yK of two vectors whose
entries lie in [-1, 1]. It works in **stochastic computing**, where a number is
carried by a long random bit stream, not by a binary word. The design follows the
architecture of "High-Accuracy and Fault Tolerant Stochastic Inner Product
Design" (Haselmayr, Wiesinger, Lunglmayr). The RTL, the testbenches and the
choices listed under *Where this RTL goes beyond the paper* belong to this
implementation.

Stochastic products are cheap: one or two gates per bit. Sums are the hard part.
The plain stochastic adder is a multiplexer, and it halves its result. An adder
tree over K inputs therefore scales the result down by K and loses most of its
precision. This design does not scale the sum. Its three main ideas:

* **Two-line bipolar streams.** A number is the difference of two unipolar streams,
  x = (1/L)·Σ(Xp[l] − Xn[l]), so every stream bit is −1, 0 or +1.
* **One central accumulator.** There is no adder tree. The K product bits of one
  stream position are fed one after another, on a faster clock, into a single
  non-scaled adder. That adder keeps any excess as *carries* in two short shift
  registers.
* **Early cancellation.** On the way to the accumulator, a +1 and a −1 that meet
  cancel each other (the *carry canceler*). Fewer carries need to be stored, so
  the small carry registers overflow less often.

The default configuration is K = 16 vector entries, M = 6 bits per carry register
and L = 10,000 stream bits per result. This is the configuration of the paper's
fault-tolerance study.

## Stream formats and conversions

| value | TLB (p, n) | SM (s, m) |
|------:|:----------:|:---------:|
| +1 | (1, 0) | (0, 1) |
| −1 | (0, 1) | (1, 1) |
|  0 | (0, 0) or (1, 1) | (x, 0) |

*TLB* (two-line bipolar) is the internal format. *SM* (signed magnitude) is the
format of earlier non-scaled stochastic adders. The converters are one gate per
line:

* TLB → SM: m = p ⊕ n, s = n (`tlb_to_sm`).
* SM → TLB: p = ¬s·m, n = s·m (`sm_to_tlb`).

The top module provides its output stream in both formats.

The **multiplier** (`tlb_multiplier`) converts both operands to SM. It then
multiplies in SM (s = s_x ⊕ s_y, m = m_x·m_y) and converts the result back to TLB.
For every stream bit, the output value is exactly the product of the input values
in {−1, 0, +1}. For independent streams, the output stream therefore encodes x·y.
A multiplier output never drives both lines at once.

## Datapath

```
 x_k,y_k ──► tlb_sng ×2K ──► multiplier_stage ──► input_shift_regs ──► accumulation_stage ──► Z_p,Z_n
  (binary)   (streams)      K multipliers +      p_s, n_s + K-1       p_c, n_c (M bits each)     │
                            hold regs p_h, n_h   carry cancelers       + output flip-flops        ├─► tlb_to_sm ─► z_sm
                                                                                                  └─► tlb_stream_counter ─► result
```

All indices below are 1-based, as in the paper. In the RTL, index 0 of a vector
is element [1].

**1. Multiplier stage** (`multiplier_stage`). At every main-clock edge, the K
product bits are captured into the hold registers: V_p,k goes into p_h[k] and
V_n,k into n_h[k]. The hold registers keep the values for one whole main period.

**2. Input shift registers** (`input_shift_regs`). At the next main-clock edge,
the hold registers are copied crosswise:

* p_h[k] → p_s[k]
* n_h[k] → n_s[K−k+1]

The crosswise copy places the two halves of product k in the same row of the two
registers.

During the following K high-clock steps, both registers move one place toward
element [1]. Zeros enter at element [K]. The value written into element k passes
a **carry canceler** (`carry_canceler`) together with the diagonal element of the
other register:

    p_s[k] ← p_s[k+1] · ¬n_s[K−k+1]
    n_s[k] ← n_s[k+1] · ¬p_s[K−k+1]        (k = 1 … K−1)

When both inputs of a canceler are one, it writes zeros: a +1 and a −1 have
cancelled. Because n_s is loaded in reverse order, the two registers drain in
opposite directions relative to the product index. As a result, each +1 meets a
different −1 on every shift.

Cancellation never changes the sum. Over one load and drain, the sum of
p_s[1] − n_s[1] seen by the accumulator equals Σ(p_h − n_h).
`tb_input_shift_regs` checks this property.

**3. Accumulation stage** (`accumulation_stage`). This stage is the hardest part
to follow, so it is described in full below.

## The carry registers and their update rules

Each carry register (`carry_shift_reg`) holds a count in **thermometer code**.
p_c stores positive carries and n_c negative ones. The register supports three
operations:

* **Shift in** (store a carry): a one enters at element [1] and the contents move
  toward [M]. If element [M] was already set, that carry is lost. This is an
  *overflow*, and the `overflow` output pulses.
* **Shift out** (use a carry): a zero enters at element [M] and element [1] leaves
  the register.
* **Hold**: no change.

Element [1] is one exactly when at least one carry is stored. The update logic
therefore only needs the two heads, combined as C = p_c[1] − n_c[1].

At every high-clock step, the input is X = p_s[1] − n_s[1]:

| X | C | action |
|---|---|--------|
| 0 | 0 | p_c and n_c shift out (this matters only when both heads are one) |
| 0 | ±1 | hold |
| +1 | 0, heads 0/0 | p_c shift in |
| +1 | 0, heads 1/1 | n_c shift out |
| +1 | −1 | n_c shift out (a stored −1 cancels the new +1) |
| +1 | +1 | p_c shift in |
| −1 | … | mirror image of X = +1 |

At every main-clock edge, p_c[1] and n_c[1] move into the output flip-flops Z_p
and Z_n, and **both registers shift out**. Exactly one output unit leaves per main
period, and it leaves the carry store. Over a whole run, the following balance
holds: Σ outputs + stored carries = Σ products − lost carries.

In normal operation, both heads are never one at the same time. A positive carry
is only stored when no negative one is present, and vice versa. The "heads 1/1"
rows matter after a bit flip, and they let such a state clean itself up.

Accuracy is limited in two ways:

* The output can emit at most one unit per stream bit. A true sum outside [−1, 1]
  saturates, and its carries pile up and overflow.
* With M = 6, a local run of same-signed product bits larger than about six units
  also overflows and loses carries. This happens more often when many products
  are large.

`tlb_nonscaled_adder` applies the same idea to two streams (Z = X + Y) with the
paper's separate two-input rule set. It is a stand-alone building block. The
inner product does not use it, because the accumulator above takes its place.

## Timing

There is one clock, the high clock. The paper's slower *main clock* is realised
as a one-cycle enable, `main_tick`, generated by `phase_ctrl`. One main period is
**K + 1 high-clock cycles**:

* 1 cycle for the main-clock edge: hold registers capture, shift registers load,
  one output bit is emitted;
* K cycles of `step`, each moving one element into the accumulator.

At K = 16, one output bit is produced every 17 cycles.

Latency: a stream bit sampled at main edge t reaches the hold registers at t. It
moves to the shift registers at t+1 and is accumulated during that period. Its
effect can first appear on Z after edge t+2. `tb_sc_inner_product` checks this
with a single product.

In the top module, `start` latches x and y, clears all state and restarts the
generators. The first two output bits (pipeline fill) are skipped and the next L
are counted. `done` is high after the (L+1)(K+1)+2-th clock edge that follows the
edge sampling `start`. At the defaults this is 170,019 cycles. The decoded result
is `result / L`. Carries still stored when the stream ends are dropped.

## Modules and parameters

| module | role | parameters (default) |
|---|---|---|
| `sc_pkg` | types `tlb_bit_t`, `sm_bit_t`, `carry_op_e`, `tlb_value()` | |
| `tlb_to_sm`, `sm_to_tlb` | format converters | |
| `tlb_multiplier` | one stochastic multiplier | |
| `tlb_sng` | binary → TLB stream (LFSR + comparator) | DATA_W=16, SEED, REVERSE |
| `carry_shift_reg` | one thermometer carry register | M=6 |
| `tlb_nonscaled_adder` | two-input non-scaled adder (stand-alone) | M=6 |
| `multiplier_stage` | K multipliers + hold registers | K=16 |
| `carry_canceler` | one CC | |
| `input_shift_regs` | p_s, n_s with K−1 cancelers | K=16 |
| `accumulation_stage` | update logic, p_c, n_c, output flip-flops | M=6 |
| `phase_ctrl` | main/high clock sequencing | K=16 |
| `sc_inner_product` | the inner-product core | K=16, M=6 |
| `tlb_stream_counter` | back conversion (up/down counter) | W=16 |
| `sc_inner_product_top` | generators + core + SM output + counter | K=16, M=6, L=10000, DATA_W=16 |

Top-level ports of `sc_inner_product_top`:

* `clk`, `rst_n` (asynchronous, active low).
* `start`.
* `x[K]`, `y[K]`: signed DATA_W-bit words with x = word / 2^(DATA_W−1).
* `flip_p`, `flip_n`: bit-flip masks XORed into the carry registers. Tie them to
  zero in normal use.
* `busy`, `done`.
* `result`: signed sum of the L output bits.
* `z_tlb`, `z_sm`: the output stream, valid when `z_valid`.
* `overflow_count`: cycles in which a carry was lost (saturating).

## Measured behaviour

All figures below come from the testbenches, at the default size unless stated
otherwise.

* **Accuracy** (`tb_sc_inner_product_top`, random entries in [−0.5, 0.5]):
  decoded results land within about 0.01 to 0.03 of the exact value. With
  alternating ±0.25/0.3 products, more carries overflow and the error grows to
  about 0.045. A zero vector gives exactly 0. A sum near 14 saturates at +1.
* **Accuracy against carry-register length** (`tb_accuracy_vs_m`, K = 16, 16
  random vectors, four units with M = 2, 3, 4 and 6 run side by side): the RMS
  error was about 0.04, 0.02, 0.013 and 0.010, and fewer carries were lost as M
  grew. The paper names M = 6 as the length needed for an RMS error of 0.02 at
  K = 16.
* **Fault tolerance** (`tb_fault_tolerance`): each of the 12 carry bits flips
  with probability P_flip once per output bit. The RMS error over 16 random
  vectors was about 0.008, 0.016, 0.030, 0.031 and 0.040 for P_flip = 0, 1, 2, 3
  and 5 %. The paper's curve rises more steeply, to about 0.2 at 5 %. It defines
  its error as sqrt(mean |error|), which the testbench also prints (0.08 to
  0.18), and it does not say how often flips are applied. The two curves are
  therefore not directly comparable.
* **Canceler effectiveness** (`tb_canceler_performance`): product bits are
  nonzero with probability 0.5. The fraction of ones leaving the input shift
  registers was 0.22, 0.13 and 0.075 for K = 2, 16 and 64. Without cancelling it
  would be 0.25. The paper reports the same trend.

## Where this RTL goes beyond the paper

* **Single clock.** The main clock is a `main_tick` enable in the high-clock
  domain. The main period is K+1 high cycles, not exactly K: one cycle carries
  the load/emit edge.
* **Emitting an output bit.** It is read as a *shift out* of both carry
  registers. The paper says the heads are "shifted to the output flip-flops".
* **Cases the update algorithm does not list** (X = 0 with C ≠ 0) hold the
  registers.
* **Overflow.** A shift in to a full register drops the carry. This is a natural
  reading; the paper gives no rule.
* **Random source.** The paper says only "random generator and comparator". Each
  generator has its own 16-bit LFSR, x^16+x^14+x^13+x^11+1, with its own seed.
  The y-side generators read the LFSR word bit-reversed to decorrelate them from
  the x side.
* **Input word format and counting window.** Both are this design's choices, and
  so is the back-conversion counter, which the paper only names.
* **Fault-injection ports** (`flip_p`, `flip_n`) exist to reproduce the bit-flip
  experiment. They are not part of the described hardware.
* **Two-input adder output timing.** `tlb_nonscaled_adder` forms its sum bit
  combinationally in the same cycle as its inputs. Its carry registers update on
  the clock edge.
* **Converter zero encoding.** A zero magnitude converts to (p, n) = (0, 0).

## Simulating

Each testbench in `tb/` is self-checking and prints
`TB_RESULT checks=N failures=M`. To build and run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/sc_pkg.sv tb/tb_sc_inner_product_top.sv \
          --top-module tb_sc_inner_product_top -o sim
./obj_dir/sim
```

`tb_sc_inner_product_top` and `tb_fault_tolerance` run the unit at full default
size. They take about 1 s and 10 s. Block testbenches use small K and M. To
change a size, override the parameters of `sc_inner_product_top`, for example
`#(.K(64), .M(8))`. The main period, the counter widths and the run length follow
automatically.
