# Scalable deterministic unary multiplication and dot products

Unary (thermometer-coded) arithmetic represents a number in [0, 1] as a bit
stream whose fraction of ones is the value, and multiplies two such streams
with a single AND gate. To get an *exact* product deterministically, every bit
of one stream has to meet every bit of the other once ("clock division"). For
two 2^n-bit operands that makes the output 2^(2n) bits long. So every level of
logic squares the stream length.

This RTL implements a multiplier that keeps the output at 2^n bits and still
lands within two bits of the best possible 2^n-bit answer. Each n-bit operand
is split into two halves:

* the **high half** is the operand rounded down to a 2^(n/2)-bit stream (the
  *downscaled* operand, written A' and B');
* the **low half** is the *error* of that rounding.

The high halves are multiplied by clock division, which gives 2^(n/2) x
2^(n/2) = 2^n output bits. The output comes out slightly low, because both
inputs were rounded down. The missing amount is then put back by turning a
computed number of 0s into 1s inside the output stream. A second pair of small
unary multipliers works out how many. On top of the multiplier sits a
*hybrid binary-unary neuron*. It forms products in unary, sums them in binary,
and handles negative weights with a separate accumulator.

The design follows Kiran and Riedel, "A Scalable Approach to Performing
Multiplication and Matrix Dot-Products in Unary". The control, handshakes,
widths and some circuit details are this implementation's own. They are marked
below.

## 1. Unary streams and clock division

A thermometer generator (`unary_sng`) holds an operand `v` in a register and
compares it with a counter. Its output is `v > cnt`. As the counter runs
0 .. 2^W-1, the stream is `v` ones followed by zeros, which represents
v / 2^W.

For a product, two generators share a pair of counters in series
(`clkdiv_counter`). The *fast* counter advances every cycle. The *slow*
counter advances only when the fast one rolls over, which is detected by
ANDing all of the fast counter's bits. Over 2^(2W) cycles:

* the fast operand's stream repeats 2^W times, once per "row";
* the slow operand holds each of its bits for a whole row of 2^W cycles;
* every pair of bits meets exactly once.

So the AND output has exactly a*b ones (`unary_det_mult`). It is convenient to
think of cycle `t` as the grid position (row = slow counter, column = fast
counter).

## 2. The arithmetic

Let h = n/2 and q = 2^h, and write A = A_H*q + A_L and B = B_H*q + B_L. The
count the 2^n-bit output must hold is A*B / 2^n:

    A*B / 2^n = A_H*B_H  +  (A_L*B_H)/q  +  (B_L*A_H)/q  +  (A_L*B_L)/q^2
                \_____/     \________/      \________/      \___________/
               main product   Inv(A')        Inv(B')        dropped

The circuit produces

    result = A_H*B_H + round(A_L*B_H / q) + round(B_L*A_H / q)

Dropping the last term, and rounding the two middle terms separately, costs at
most two output bits against round(A*B/2^n). That matches the paper's bound.

Worked example (n = 4, q = 4): A = 5/16, B = 15/16.

* A_H = 1, A_L = 1, B_H = 3, B_L = 3.
* A_H*B_H = 3.
* Inv(A') = round(1*3/4) = 1.
* Inv(B') = round(3*1/4) = 1.
* The result is 5/16, the best 16-bit approximation of 4.6875/16.

The rounding is to nearest: the paper's example rounds 3 x 1/4 up to 1. It is
implemented by starting each correction counter at q/2 and reading only its
upper h bits. With truncation instead, the mean error would be several times
larger.

## 3. Where the extra ones go (error compensation)

This is the subtle part of the design. The main multiply streams A' on the
fast counter and B' on the slow counter. Because each operand was rounded
*down*, the only bit of its stream that is wrong is its **first 0**, which
should be partly 1. The compensation turns that bit into a 1 a certain number
of times. It must do so only where the other operand's bit is 1, so that each
flip adds exactly one to the product:

* **A flips.** The first 0 of A' is column A_H, which comes up once in every
  row. It is flipped in the first Inv(A') rows. B' is 1 there, because
  Inv(A') <= B_H always.
* **B flips.** The first 0 of B' is the whole row B_H. It is flipped in that
  row's first Inv(B') columns. A' is 1 there, because Inv(B') <= A_H.

The two sets of flips never fall on the same cycle, so they never combine into
the dropped A_L*B_L term. For the example above the streams are:

    A' (fast, 1/4 repeated):   1100 1000 1000 1000    <- column 1 flipped in row 0
    B' (slow, 3/4 held):       1111 1111 1111 1000    <- row 3 flipped at column 0
    AND:                       1100 1000 1000 1000    =  5/16

`error_comp_module` does this without comparing counters with operands, as
the paper intends:

* It loads Inv(A') and Inv(B') into down-counters at the start of a product.
  Each flip uses up one count.
* For A, a one-bit register remembers the previous bit of the current row.
  The register is taken as 1 at the start of each row. A 1 -> 0 step marks
  the first 0.
* For B, the first row in which B' is 0 is its first-0 row. Inv(B') is
  smaller than a row, so its down-counter runs out within that row.

The module drives the select lines of two multiplexers, one choosing A or
NOT(A) and the other B or NOT(B). Their outputs feed the final AND gate.

## 4. Structure

    unary_neuron                     hybrid neuron, LANES lanes, binary accumulators
     └─ unary_scalable_mult  x LANES two-stage pipelined multiplier
         ├─ error_estimator          stage 1: Inv(A'), Inv(B')
         │   └─ unary_det_mult x 2   clock-division multiplier + output counter
         │       ├─ clkdiv_counter
         │       └─ unary_sng x 2
         └─ main_multiplier          stage 2: A' x B' with compensation
             ├─ clkdiv_counter
             ├─ unary_sng x 2
             └─ error_comp_module

`unary_pkg` holds the default sizes and the sideband struct. The comment at the
top of every file describes its ports and timing.

| parameter | default | meaning |
|-----------|---------|---------|
| `N_BITS`  | 8 | operand precision n; streams are 2^n = 256 bits (the length the paper settles on for its function and matrix experiments). Must be even. |
| `LANES`   | 6 | multipliers working in parallel in the neuron (the number of input/weight pairs drawn in the paper's neuron). |
| `MAX_TERMS` | 2048 | longest dot product the accumulators are sized for (the inner dimension of the evaluated matrices). |

## 5. Timing of the multiplier

Both stages take 2^n cycles:

* Stage 1 runs its two correction multipliers in parallel.
* Stage 2 streams the compensated product.

`unary_scalable_mult` runs the two stages as a lock-step pipeline. While
stage 2 streams product k, stage 1 computes the corrections for product k+1.
Stage 1's final counts go straight into stage 2's down-counters at the moment
both stages end, so no cycle is lost.

* **Input:** valid/ready. `in_ready` is high when the pipeline is idle, or when
  both busy stages are in their last cycle. A full pipeline therefore takes a
  new operand pair every 2^n cycles.
* **Output stream:** `out_bit` is valid (`out_valid`) for the 2^n cycles that
  start one cycle after stage 1 finishes. `out_last` marks the last bit.
* **Count:** `result` (units of 2^-n) appears with a one-cycle `res_valid`
  pulse, 2^(n+1) + 1 cycles after the pair was accepted.
* **Sideband:** `in_user` travels with the pair and comes out as `out_user`
  (alongside the stream) and `res_user` (alongside the count).

The lower-level units use a `start` / `busy` / `last` / `done` convention. A
new `start` is allowed in the `last` cycle. The `*_final` outputs are
combinational and already include the current bit in that cycle.

## 6. The neuron

`unary_neuron` computes sum_k s_k * x_k * w_k. Its inputs and operands are:

* x_k: unsigned n-bit inputs;
* w_k: n-bit weight magnitudes;
* s_k: weight signs, given on `w_neg`.

Streams carry no sign. Instead, the output bits of positive-weight products
and negative-weight products are counted, every cycle, into two separate
binary accumulators (`pos_sum`, `neg_sum`). The output `dot` is their signed
difference. This is the split the paper proposes so that bipolar unary
encoding can be avoided.

A dot product is fed as groups of `LANES` terms:

* Groups are accepted every 2^n cycles, with the same valid/ready handshake as
  the multiplier.
* The group that ends a dot product carries `in_last`.
* Lanes not used in a partial group are switched off with `lane_en`.
* `dot_valid` pulses 2^(n+1) + 1 cycles after the last group is accepted.
  The accumulators restart at once, so the next dot product can already be in
  the pipeline.

At the defaults, a 2048-term dot product takes 342 groups, about 87,600
cycles. The activation function that would follow the subtraction is not
included: `dot` is the pre-activation value.

## 7. Accuracy measured on this RTL

All figures below are from simulation of this RTL. The mean absolute error
(MAE) is measured against round(A*B/2^n) and given as a percentage of 2^n.

| stream length | products | MAE (this RTL) | MAE (paper) | max error | products off by 2 |
|---------------|----------|----------------|-------------|-----------|-------------------|
| 2^4 | all 256    | 0.928 % | 0.93 % | 1 | 0 |
| 2^6 | all 4,096  | 0.341 % | 0.34 % | 2 | 1 |
| 2^8 | all 65,536 | 0.105 % | 0.16 % | 2 | 54 |

The results for 2^4 and 2^6 agree with the paper to the printed digits. The
paper does not say why its 2^8 figure is higher.

**Progressive accuracy (2^4).** This table estimates the value from only the
first k output bits (ones x 16 / k). For k = 10, 11, 12, 13, 14, 15, 16 it
gives 11.6, 9.1, 6.6, 5.4, 3.8, 2.2 and 0.93 %. The paper lists 23.67, 18.45,
12.32, 8.61, 3.78, 1.52 and 0.93 %. The paper does not define its metric, so
only the end points are comparable.

**Dot products.** Every result matches the sum of the reference products
exactly, including 2048-term sums at all-maximum operands, which sets the
accumulator width. The per-product error against the exact real product
a*b/2^n is 1.8 / 0.53 / 0.14 % for 2^4 / 2^6 / 2^8.

## 8. Departures from the paper and choices made here

* **One clock.** The paper clocks the slow counter from the AND of the fast
  counter's bits. Here that AND is a synchronous enable.
* **Inv counters.** The paper draws the Inv(A') / Inv(B') counters as n/2 bits.
  Here each is an n-bit counter preset to 2^(n/2-1), of which only the upper
  n/2 bits are used. This is the same as an n/2-bit counter behind an n/2-bit
  prescaler, and it gives the round-to-nearest behaviour described above.
* **Compensation logic.** The paper gives what the compensation module does,
  not its gates. The first-0 detection, the down-counters and the placement of
  flips in the first rows/columns are this design's. The placement
  reproduces the paper's worked example bit for bit.
* **Pipeline control.** The handshakes, the sideband and the lock-step
  pipeline control are not in the paper. The paper only states that the two
  stages can be pipelined to one product every 2^n cycles, with 2^(n+1)
  latency. That is what the design does.
* **Neuron counters.** The paper notes that one counter pair can serve all of
  the neuron's generators. Here every lane keeps the counters of its own
  multiplier. The streams are identical; only area differs.
* **Neuron products and signs.** The paper's neuron diagram shows plain
  comparators and AND gates with fixed positive and negative lanes. Here each
  lane is a full scalable multiplier and carries a sign bit per term.
* **Reset and operand sizes.** All state has an asynchronous active-low reset
  (`rst_n`). Only even n is supported; the paper mentions odd splits only as
  unbalancing the pipeline.

**Not included:**

* the activation function, which the paper leaves to the network design;
* the Maclaurin-series function circuits (exp, sin, log, sigmoid), which the
  paper takes from other work without giving their structure;
* the LFSR / Sobol / Halton baselines the paper compares against.

## 9. Simulating

Each testbench checks its unit against values computed from the formulas (in
`tb/unary_ref_pkg.sv`), not from the circuit. It prints
`TB_RESULT checks=N failures=M`.

| testbench | what it covers |
|-----------|----------------|
| `tb_unary_sng` | every operand/counter pair of a 4-bit generator |
| `tb_clkdiv_counter` | count sequence, roll-over, enable, clear |
| `tb_unary_det_mult` | all 3-bit products back to back, latency, preset |
| `tb_error_estimator` | rounded Inv values for corner and random operands |
| `tb_error_comp_module` | exact flip positions for every A', B' and random Inv |
| `tb_main_multiplier` | every output bit against the compensated-stream model, and the paper's example |
| `tb_unary_scalable_mult` | all 4-bit pairs and random 8-bit pairs: counts, streams, sideband, throughput, latency, stalls |
| `tb_unary_neuron` | 40 dot products at reduced size: signs, partial groups, bubbles, back-to-back dot products |
| `tb_unary_neuron_full` | default-size neuron: three 2048-term dot products, including the extremes |
| `tb_mult_workload` | exhaustive multiplication at 2^4, 2^6, 2^8 with the accuracy figures above |
| `tb_matrix_workload` | a 2 x 2 slice of a [2048 x 2048] . [2048 x 128] product at all three sizes |

To run one with Verilator 5 (from the directory holding `rtl/` and `tb/`):

    verilator --binary --timing --assert -Wno-fatal --top-module tb_unary_neuron \
        -y rtl -y tb +libext+.sv rtl/unary_pkg.sv tb/unary_ref_pkg.sv \
        tb/tb_unary_neuron.sv -o sim
    ./obj_dir/sim

Each run takes seconds; the exhaustive 2^8 sweep takes about ten. The modules
assert that parallel units stay in lock step, so keep `--assert`. To change
the precision, set `N_BITS`; the multiplier follows from it. For more or fewer
parallel products, set `LANES`.
