# SleepViT accelerator: a vision transformer for sleep staging in fixed point

A wearable sleep monitor must label every 30-second EEG epoch as wake, light sleep,
deep sleep or REM. It must do this on a battery, with no host processor involved. This design
classifies one epoch with a small vision transformer:

- the 3840-sample epoch (128 Hz) is cut into 60 patches of 64 samples;
- the patches go through one encoder layer of width 64 with 8 attention heads and an MLP of 32;
- an MLP head and a softmax give four class probabilities;
- the probabilities of the last three epochs are averaged, and the largest average is the sleep stage.

The hardware trades speed for area and leakage. It has one small compute core and keeps all
state in on-chip SRAM:

- one adder and one multiplier, shared by every unit;
- a handful of dedicated units: MAC, softmax, LayerNorm, exponential, divider and square root;
- a controller that runs the whole network from a fixed table of loops instead of instructions.

Every value is stored in SRAM as 8 bits, or 16 bits for the raw EEG. It is widened to a 39-bit
fixed-point format only while it is being computed on.

One inference takes **3,118,475 clock cycles**. That is 31 ms at 100 MHz, about 0.1 % of the
epoch it classifies. The original silicon implementation reports 45.6 ms.

The design follows the published architecture of the SleepViT ASIC:

- the block structure and the shared adder/multiplier;
- the memory sizes and the 8/16-bit storage;
- the Q18.21 compute format and the unit algorithms;
- the SoC signal names.

Much of the detail inside the blocks is not published and is this design's own. Each such
point is marked below and in the opening comment of each file.

## Block overview

```
 SoC: strt_ld, new_eeg, eeg[15:0], new_eph          inf_done, sleep_stage[1:0]
            |                                                ^
            v                                                |
   +-----------------+   op table   +-----------+      +------------+
   | vit_fsm         |------------->| mac_unit  |----. | avg_filter |
   | (controller,    |------------->| softmax_  |    | +------------+
   |  EEG loader,    |------------->| layernorm_|-fx_sqrt     ^ prob[4]
   |  vector adds)   |              +-----------+    |        |
   +-----------------+                   |  fx_exp    |   vit_fsm
            |   \_______ req_mux (one per shared resource) ___/
            v                |            |            |
   intermediate results   fx_adder   fx_multiplier  fx_divider
   mem_ctrl 4 x 14336 x 8b                  weights: mem_ctrl 2 x 15872 x 8b
```

| file | role |
|---|---|
| `sleepvit_pkg.sv` | formats, request/response structs, model sizes, memory maps |
| `fx_adder.sv`, `fx_multiplier.sv` | shared single-cycle adder (ripple carry) and multiplier |
| `fx_divider.sv`, `fx_sqrt.sv` | long division with round-half-even (63 cycles); digit-by-digit square root (31 cycles) |
| `fx_exp.sv` | e^x = 2^floor(z) * Taylor(2^frac(z)), using the shared adder and multiplier |
| `mac_unit.sv` | strided dot product with activation none / linear / swish |
| `softmax_unit.sv`, `layernorm_unit.sv` | row-wise softmax (in place) and LayerNorm |
| `sram_bank.sv`, `mem_ctrl.sv` | 8-bit SRAM bank; bank splitting, 16-bit access, format casting |
| `req_mux.sv` | OR-multiplexer for a shared resource, with a one-requester assertion |
| `vit_fsm.sv` | the instruction-less controller |
| `avg_filter.sv` | three-epoch moving average and argmax |
| `sleepvit_top.sv` | everything wired together |

## Numbers: one compute format, many storage formats

This is the part that most needs understanding before reading the RTL.

**Compute format.** Every arithmetic unit works on signed Q18.21 values (`fx_t`): 39 bits, of
which 21 are fractional. That gives a range of ±262144 and a resolution of 4.8e-7.

Rules of the adder and multiplier:

- The result is saturated symmetrically to ±(2^38−1), and `ovfl` is raised when that happens.
  The code −2^38 is never produced.
- The multiplier truncates toward −∞: it shifts the 78-bit product arithmetically right by 21.
- Both units register their result, and only on a cycle where `refresh` is high. The output
  therefore holds still between uses, which saves dynamic power. A result is available the
  cycle after the request.

One published block diagram labels the compute data "Q26.13". The text says Q18.21, and the
published divider and square-root latencies (N+Q+3 = 63, ⌊(N+Q)/2⌋+1 = 31) only work out for
N=39, Q=21. Q18.21 is what is built.

**Storage formats.** SRAM words are 8 bits. A value is stored either:

- single width (8 bits): Qm.f with f fractional bits; or
- double width (16 bits, Q8.8): split over two banks at the same offset, so it is still read or
  written in one cycle.

Each memory request carries:

- `en`;
- `dw`, which selects double width;
- `frac`, the number of stored fractional bits;
- `addr`;
- `data`, on writes.

The memory controller (`mem_ctrl`) converts in both directions:

- **Read:** sign-extend, then shift left by 21−frac. This is exact.
- **Write:** shift right by 21−frac, which is a floor, then saturate symmetrically to ±127
  (single) or ±32767 (double). `wr_sat` reports a saturated write.

Because saturation is symmetric, −128 is never stored. Weights loaded as the byte 0x80 read
back as −127/2^f.

The formats per layer are this design's choice, within the published ranges (weights Q2.6 to
Q5.3; intermediate results Q1.7 to Q6.2, or Q8.8 double width):

| data | stored as |
|---|---|
| EEG samples | Q8.8 double width: (eeg − 32768)/256, so ±128 |
| residual stream, Q/K/V, attention scores, MLP hidden, logits | Q4.4 |
| LayerNorm outputs, class token, position embedding | Q3.5 |
| softmax outputs | Q1.7 |
| all weights, biases, gamma, beta | Q2.6 |

To change a format, change one constant in `sleepvit_pkg` (`F_*`). Every unit takes the
formats of its operands as inputs.

## The controller: a network as a table of loops

`vit_fsm` fetches no instructions. Its function `get_op(pc, head)` returns a record for each of
21 operations.

Each record gives:

- the kind of operation: MAC, softmax, LayerNorm, element-wise add, or output;
- a grid of `rows × cols` output elements;
- for each operand and for the destination, a base address, a row step and a column step;
- the vector length and stride for the MAC;
- the stored formats;
- the bias or gamma address.

The FSM walks the grid and calls the right unit once per element. It keeps running row and
column pointers, so there is no address multiplier.

Operations, in order:

| pc | operation | unit | grid × length |
|---|---|---|---|
| 0 | patch projection X[1..60] = EEG·Wpᵀ + b | MAC linear, first operand double width | 60×64 × 64 |
| 1 | class token X[0] = cls | add (with 0) | 1×64 |
| 2 | X += position embedding | add | 61×64 |
| 3 | LN1 | LayerNorm | 61 rows |
| 4–6 | Q, K, V = LN·Wᵀ + b | MAC linear | 3 × 61×64 × 64 |
| 7 | scores S = Q_h·K_hᵀ (one head) | MAC none, both operands from intermediate memory | 61×61 × 8 |
| 8 | softmax of each score row, in place | softmax | 61 rows of 61 |
| 9 | O_h = S·V_h | MAC none, V read with stride 64 | 61×8 × 61 |
| 10 | projection of the concatenated heads | MAC linear | 61×64 × 64 |
| 11 | residual X += attention | add | 61×64 |
| 12 | LN2 | LayerNorm | 61 rows |
| 13 | MLP hidden = swish(LN·W1ᵀ + b) | MAC swish | 61×32 × 64 |
| 14 | MLP out | MAC linear | 61×64 × 32 |
| 15 | residual X += MLP | add | 61×64 |
| 16 | LN of the class token | LayerNorm | 1 row |
| 17, 18 | MLP head: swish 32, then linear 4 | MAC | 32 × 64, 4 × 32 |
| 19 | softmax of the 4 logits | softmax | 1 row |
| 20 | read the 4 probabilities out to the filter | — | 4 |

Operations 7–9 repeat for each of the 8 heads. Only one head's 61×61 score matrix exists at a
time. Each head writes its 8 output columns into the LayerNorm buffer, which is free at that
point.

Transposed operands need no copy. A row of Kᵀ is read with stride 64, and so is a column of V.

The memory maps (`A_*` for intermediate results, `W_*`/`B_*`/`G_*` for weights) are in
`sleepvit_pkg`. The weight image needs 31,556 bytes laid out as listed there, with every matrix
stored `[output][input]`. The published model has 31,589 parameters; the source of the
difference is unknown.

Network choices that are this design's own:

- The class token.
- Pre-norm residual placement as in the standard ViT.
- Folding the 1/√8 attention scale into W_Q and its bias: a model trained in floating point
  must be exported that way.
- The LayerNorm before the MLP head.
- The class order: 0 wake, 1 light, 2 deep, 3 REM.

## Compute units

**MAC** (`mac_unit`) is the workhorse: it accounts for 74 % of inference cycles.

- **Pipeline.** It issues one read pair per cycle: operand A from intermediate results, and
  operand B from weights or intermediate results (`b_src`). The multiply happens a cycle later
  and the accumulate a cycle after that, on the shared units.
- **Linear.** Adds a bias read from the weight memory.
- **Swish.** Computes e^−x, then one division 1/(1+e^−x), then one multiply by x. The
  reciprocal makes the division a single one per output.
- **Latency for length 64:** 68 / 70 / 147 cycles for none / linear / swish. Published:
  72 / 76 / 170.

**Exponential** (`fx_exp`):

1. z = x·log2(e), on the shared multiplier.
2. 2^frac(z) ≈ 1 + c1·f + c2·f² + c3·f³, evaluated by Horner's rule on the shared multiplier and
   adder.
3. Shift by floor(z). Overflow saturates; results too small flush to zero.

It takes 9 cycles; the published unit takes 24. The coefficients are
c_k = (ln 2)^k / k!, stored as round(c_k · 2^21).

**Softmax** (`softmax_unit`):

1. Exponentiate each element into a 64-entry local buffer while summing.
2. Take one reciprocal of the sum.
3. Multiply each buffered value by it and write back in place.

It does not subtract the row maximum first. This is safe only because its inputs are Q4.4
scores (|x| < 8). For 64 elements it takes 1025 cycles; the published unit takes 1926.

**LayerNorm** (`layernorm_unit`) makes three pipelined passes over the row:

1. the sum S1, one element per cycle;
2. the sum of squares S2, one element per cycle (read, square, accumulate overlap);
3. the output gamma·(x−mean)·inv + beta, one element every two cycles.

In between it computes mean = S1/len, var = S2/len − mean², and inv = 1/√(var + 2^−9) with
its own square-root unit and the shared divider. Computing the variance from S2 lets the second
pass run without the mean; this is exact because sums of 8-bit inputs are exact in Q18.21, but
S2 must stay below 2^18 (|x| < 64 for a 64-wide row, always true for Q4.4 inputs).

The third pass needs two additions and two multiplications per element, and there is only one
adder and one multiplier, so two cycles per element is the best possible. Element k uses:

| cycle | action |
|---|---|
| 2k | read x_k and gamma_k |
| 2k+1 | add x_k − mean; read beta_k |
| 2k+2 | multiply by inv |
| 2k+3 | multiply by gamma_k |
| 2k+4 | add beta_k |
| 2k+5 | write |

Even cycles serve the add of element k−2 and the multiply of element k−1; odd cycles the add of
element k and the multiply of element k−1, so no unit is claimed twice. For 64 elements it
takes 493 cycles (about 4·len + 240); the published unit takes 1943.

**Divider** (`fx_divider`): restoring long division of |a|·2^21 by |b|. The timing is:

- 1 load cycle;
- 60 quotient-bit cycles;
- a round-half-to-even step;
- a sign step.

That is 63 cycles from the rising edge of `start`. Division by zero returns ±max with `ovfl`
and `flag` set.

**Square root** (`fx_sqrt`): digit-by-digit on in·2^21, taking 31 cycles. A negative radicand
sets `flag` and returns 0.

The interfaces are uniform:

- Multi-cycle units take a `unit_req_t` (start, in1, in2) and return a `unit_rsp_t` (busy,
  done, ovfl, flag, out).
- The adder and multiplier take an `arith_req_t` (refresh, in1, in2).

## Sharing: signal muxing

There is exactly one adder, one multiplier, one exponential unit and one divider. Each has one
write port and two read ports on the intermediate memory, and one read port on the weights.
The requesters are the FSM, the MAC, the softmax, the LayerNorm and the exponential unit.

Every requester drives an all-zero request bundle when it is idle. `req_mux` is therefore just
an OR of the bundles, with an assertion that at most one requester is active. This holds
because the FSM runs one unit at a time, and a unit that uses the exponential unit waits for
it.

The one real conflict is the EEG loader. It can receive a sample while a unit is writing. The
sample is then held (`eeg_defer`) until the write port is free.

## SoC interface and timing

| port | meaning |
|---|---|
| `strt_ld` | rewind the EEG buffer pointer to sample 0 |
| `new_eeg`, `eeg[15:0]` | store one unsigned sample; may arrive at any time, including during an inference |
| `new_eph` | start an inference on the buffered 3840 samples (ignored while `busy`) |
| `inf_done`, `sleep_stage[1:0]` | one-cycle pulse and the averaged, arg-maxed stage |
| `busy` | inference running |
| `err[2:0]` | sticky since `new_eph`: [0] adder or multiplier overflow, [1] a saturating memory write, [2] divide by zero or negative radicand |
| `w_we`, `w_addr`, `w_data` | write one raw weight byte; use before the first inference |

A new epoch can be streamed in while the previous one is still being classified. Wait until the
patch projection (the first 270k cycles) has read the old samples. The end-to-end testbench
streams epochs this way.

The weight-loading port is this design's own; how the original chip loads its weights is not
published.

`avg_filter` starts from zero history after reset. The first two stages are therefore averages
over fewer real epochs.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. References are computed independently in
the testbench, in `real` or wide integers.

| testbench | what is checked |
|---|---|
| `tb_fx_adder`, `tb_fx_multiplier` | random and corner operands against exact wide arithmetic; saturation, flag, refresh hold |
| `tb_fx_divider` | quotients incl. ties, divide by zero, overflow; latency 63 |
| `tb_fx_sqrt` | exact integer square root; negative flag; latency 31 |
| `tb_fx_exp` | e^x within 1 %; latency |
| `tb_mac_unit` | bit-exact dot products (strides, both B sources, double width); swish within 2 %; latencies 68 and 70 |
| `tb_softmax_unit`, `tb_layernorm_unit` | each output within 2 LSB of a `real` model; neighbouring words untouched |
| `tb_sram_bank`, `tb_mem_ctrl` | read latency and hold; casting, saturation flag, double-width halves |
| `tb_req_mux` | routing of each requester |
| `tb_vit_fsm` | the controller with stand-in units: exact operation counts (33,672 / 23,364 / 1,984 MAC calls, 489 softmax rows, 123 LayerNorm rows, 11,776 additions), key addresses, EEG writes under contention |
| `tb_avg_filter` | three-epoch mean within 2^−18 and argmax |
| `tb_sleepvit_top` | full design at default size, 3 epochs (see below) |

`tb_sleepvit_top` runs the whole accelerator at its default size:

- It loads random weights (with LayerNorm gamma near 1).
- It classifies three random epochs, streaming each next epoch during the previous inference.
- It compares the first patch-projection output with a bit-exact reference.
- It checks that the probabilities sum to 1 within 0.06, that the averaged vector is the mean
  of the last three, and that the stage is its argmax.
- It counts every mechanism and fails if one never happened: each MAC activation, softmax,
  LayerNorm, exponential, divider, square root, double-width reads, saturating writes, EEG
  deferral, vector adds and averaging.
- It checks the `err` port: saturation is reported exactly when a saturating write happened,
  and no division by zero or negative radicand occurs.
- It prints the share of cycles each unit is busy. The figures are close to the published
  activity profile:

| unit | busy (this design) | published |
|---|---|---|
| adder | 69.6 % | 64.1 % |
| multiplier | 69.1 % | 72.4 % |
| MAC | 75.5 % | 66.9 % |
| softmax | 15.3 % | 19.7 % |
| LayerNorm | 1.9 % | 6.0 % |
| divider | 5.7 % | 3.5 % |

It runs in about 20 s with Verilator.

The model is not a trained network: the weights are random. The checks therefore confirm the
arithmetic and the dataflow, not the accuracy of sleep staging. Running a trained model needs
its weights exported in the layout and formats above, with the attention scale folded into
W_Q.

### Running a testbench

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/sleepvit_pkg.sv tb/tb_sleepvit_top.sv --top-module tb_sleepvit_top -Mdir obj
obj/Vtb_sleepvit_top +verilator+rand+reset+2
```

Replace the testbench name to run any other.

## Where this design differs from the published chip

- **Unit latencies.** Exponential 9 vs 24; MAC 68/70/147 vs 72/76/170; softmax 1025 vs 1926;
  LayerNorm 493 vs 1943 cycles. Divider and square root match (63, 31). The inner schedules
  of the original units are not published.
- **LayerNorm** computes the variance as S2/len − mean², so the sum of squares of a row must
  stay below 2^18.
- **Softmax** uses no max subtraction and a local buffer.
- **No power gating.** The original work only estimates power gating from activity; here it
  is only observable through the busy ratios the end-to-end testbench prints.
- **Memories are synthesizable arrays**, not compiled SRAM macros, with two read ports and one
  write port.
- **Own choices listed above:** the weight-loading port; the per-layer formats; the memory
  maps; the class token and head structure; the EEG offset-binary conversion; the EEG
  deferral; the bank mapping of double-width data.

## Lint notes

Verilator reports width and unused-signal warnings only:

- The unused signals are the per-unit `busy` outputs, the weight memory's `wr_sat` and the
  averaged vector `avg`; they are kept for observation. The arithmetic status flags reach the
  `err` port.
- Some outputs are constant by construction. The square root's `ovfl` and the top bits of its
  root can never be set, and several fields of the controller's operation table have the same
  value in every operation.
- The adder's ripple-carry chain leaves the final carry out unused; overflow is detected from the
  operand and sum sign bits instead.
