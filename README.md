# Hybrid ANN / conventional soft demapping receiver

A neural-network demapper can learn what the channel does to the
constellation, for example a phase rotation. But running the network on every
received symbol is expensive. This receiver uses the network only to learn. It
trains a small ANN demapper on pilot symbols. It then reads the ANN's decision
regions back out as 16 points, one per symbol, and hands those points to a cheap
max-log soft demapper that does the actual per-symbol work. When the pilot bit
error rate rises again, the receiver retrains the ANN and extracts a new set of
points.

The RTL follows the approach of *"A Hybrid Approach combining ANN-based and
Conventional Demapping in Communication for Efficient FPGA-Implementation"*
(Ney, Hammoud, Wehn, IPDPSW 2022), with its 16-QAM case study: a 2-16-16-16-4
demapper network, retraining on pilots, centroid extraction, and the
sub-optimal soft demapping rule. The paper describes the architecture only at
block level. The number formats, schedules, handshakes and the centroid
computation below are this implementation's own choices, and each one is
marked as such.

## The receiver at a glance

```
              rx symbols (data + pilots)                        LLRs, hard bits
   rx_* ──────────────┬──────────────────────► soft_demapper ───────────────► llr_*
                      │                             ▲   │ (pilots)
                      │ pilots (TRAIN)              │   ▼
                      ▼                     centroid_regs   perf_monitor ── retrain request
                 demapper_ann ◄──── centroid_extractor ─┘        │
          (4 x fc_layer, sigmoid_plan,   (EXTRACT: samples the   │
           bce_grad: forward, backward,   ANN on a 64x64 lattice)│
           SGD)                                                  ▼
                                                         mode control in
   tx_* ──► mapper_lut ──► tx_sym                        hybrid_demapper_top
```

`hybrid_demapper_top` runs in one of three modes (`mode` output):

| mode | what happens | leaves when |
|---|---|---|
| `MODE_INFER` | every symbol is soft-demapped against the centroid table; pilot bit errors are counted in windows of `WINDOW` pilots | a window's error count reaches `cfg_threshold`, or `force_retrain` is pulsed |
| `MODE_TRAIN` | each pilot also drives one SGD step of the ANN (binary cross-entropy against the pilot's known bits); data symbols keep being demapped with the old centroids | `cfg_train_len` training steps are done |
| `MODE_EXTRACT` | the ANN is swept over the I/Q plane and one centroid per decision region is written into the table; demapping continues | the last centroid is written, then back to `MODE_INFER` |

The transmit side is included as well. After end-to-end training the
transmitter network is frozen, so it reduces to a 16-entry table
(`mapper_lut`) that maps 4 bits to one learned constellation point.

The paper's flow also has an end-to-end training step in software, which
produces the constellation and the initial ANN weights. The host loads both
through the `m_*` and `w_*` ports. The paper also reconfigures the FPGA between
a training image and an inference image. Here the ANN and the soft demapper sit
side by side in one design.

## Number formats

All real values are 16-bit two's complement **Q4.12**: range [-8, 8),
resolution 1/4096. This covers received I/Q samples, centroids, constellation
points, weights, activations and gradients (`hyb_pkg::fx_t`). Other formats:

- `cfg_inv_2sigma2` = 1/(2σ²) is unsigned **Q8.8**.
- LLRs are signed **Q8.8** and saturate at ±128.
- Squared distances inside the soft demapper are kept at full precision (Q8.24).

Multiplications are exact. Every right shift truncates toward −∞, and every
narrowing saturates. The testbenches model these rules bit for bit.

The paper gives no number format. Q4.12 is enough for unit-energy
constellations down to the lowest SNR of the paper's sweep (-4 dB).

## Soft demapper (`soft_demapper`)

For received symbol `s` and bit `k`:

    llr_k = 1/(2σ²) · ( min over {i : i[k]=0} |s − c_i|²  −  min over {i : i[k]=1} |s − c_i|² )

This is the max-log rule. It needs only distances and minima, with no
exponentials or logarithms. Centroid `i` stands for the symbol whose bit pattern
is `i`. **A positive LLR means the bit is more likely 1.** `hard_bits[k]` is 1
when the difference of minima is positive.

The pipeline accepts one symbol per cycle, and the result appears **4 cycles**
later:

1. 16 complex differences `s − c_i`
2. 16 squared distances
3. for each bit, the minimum over the 8 centroids with that bit at 0, the
   minimum over the 8 with it at 1, and their difference
4. multiplication by 1/(2σ²), then saturation to Q8.8

A side-band tag (`in_tag`/`out_tag`) travels with each symbol. The top level
uses it to carry the pilot flag and the pilot bits to the error monitor.

The paper reports 53.3 ns latency and 75 Msymbol/s for its soft demapper. This
pipeline gives exactly those figures at 75 MHz. The paper states no clock, so
75 MHz is an inference from its two numbers.

## Trainable demapper ANN (`demapper_ann`, `fc_layer`, `sigmoid_plan`, `bce_grad`)

Topology: I and Q → 16 ReLU → 16 ReLU → 16 ReLU → 4 → sigmoid. The output is
the probability of each bit, so there are 660 weights and biases. The paper
describes the network as "three fully connected layers with 16 neurons each,
followed by a ReLU layer and a final sigmoid layer" giving four probabilities.
This implementation reads that as three 16-wide hidden layers plus a 4-wide
output layer.

Each layer is an `fc_layer` instance. It holds its own weights and runs three
operations:

- **Forward.** All neurons work in parallel, consuming `SIMD` input elements
  per cycle (default 1). The result is z = Wx + b, and y = ReLU(z) for hidden layers. The input
  vector is kept for the backward pass.
- **Backward.** The incoming gradient is first masked by the ReLU derivative
  (z > 0), which gives dz; the bias is updated in the same cycle. Then, `SIMD`
  input columns per cycle:
  - dx_i = Σ_j W_ji dz_j, using the weights as they were before the update
  - W_ji −= dz_j · x_i · 2^−lr_shift

  This is plain SGD on one sample.
- **Host access.** Weights can be written while the layer is idle and read at
  any time. Column `N_I` addresses the bias.

`sigmoid_plan` approximates the sigmoid with the PLAN piecewise-linear curve:
segments at |z| = 1, 2.375 and 5, with slopes 1/4, 1/8 and 1/32. It uses only
shifts and adds, and its error is below 0.02.

`bce_grad` is the loss block. With a sigmoid output and binary cross-entropy
loss, the gradient with respect to the output pre-activation is simply
p_k − b_k. The loss value itself is never needed.

`demapper_ann` gives each layer its own unit. **Inference is pipelined
across the layers**: a layer starts the next sample as soon as it is free and
the following layer has taken its last result. Up to four samples are in
flight, results leave in order, and `ready` tells the caller when a new sample
can enter. A **training step runs alone**: the pipeline first drains, so each
step sees the weights left by the previous one.

| operation | cycles, `SIMD` = 1 | `SIMD` = 4 | general form |
|---|---|---|---|
| inference latency (forward only) | 59 | 22 | (S1+2) + 3·(S+2) + 1 |
| inference throughput, back to back | 1 per 18 | 1 per 6 | 1 per S+2 |
| training step (forward, gradient, backward and update of all 4 layers) | 121 | 47 | (S1+3) + 3·(S+3) + 1 + 3·(S+2) + (S1+2) |

Here S = 16/SIMD, and S1 = 2/min(SIMD, 2) is the number of input steps of the
2-input first layer. `SIMD`
must be 1, 2, 4, 8 or 16.

The paper's training engine is pipelined, with an adjustable degree of
parallelism. Its reported training latency, 267 ns, is about 20 cycles at
75 MHz. Here the degree of parallelism is the parameter `SIMD`: the number of
inputs each layer consumes per cycle, with all neurons always working in
parallel. With the default of 1, a step is about 6× slower than the paper's
figure. With `SIMD` = 16, a step takes 29 cycles. The paper does not give its
own setting. The learning rate is 2^−`cfg_lr_shift`. In
simulation, a rate of 1/16 trained all 16 labels from random weights within
6000 steps. Rates of 1/4 and 1/8 did not converge in the same run.

## From decision regions to centroids (`centroid_extractor`)

This is the least obvious part of the design, and the part where it departs
most from its source.

The paper's idea is to sample the trained ANN over the whole I/Q plane. Each
sample's hard label marks out the decision region of each symbol. The regions
form a Voronoi-like partition, so one point per region, the "centroid", can
stand in for the ANN inside a nearest-point demapper. These centroids do not
have to equal the transmitted constellation. After a π/4 channel rotation,
they come out rotated.

How it is built here:

1. **Sweep.** A `GRID` × `GRID` lattice (64 × 64) covers [−`RANGE`, `RANGE`)²
   in I and Q. Each sample sits at the centre of a lattice cell:
   `coord(g) = −RANGE + STEP·g + STEP/2`, with `STEP = 2·RANGE/GRID`. I runs
   fastest. Each sample is one ANN forward pass. Requests are issued whenever
   the ANN is ready, and the answers return in order. A second lattice counter
   follows the answers. So the sweep runs at the pipelined rate: about
   4096 × 18 ≈ 74,000 cycles.
2. **Accumulate.** For each returned label, the sample's I and Q are added to
   that label's sums, and its count is incremented.
3. **Divide.** For each label with at least one sample, the centroid is
   (ΣI/n, ΣQ/n). A 32-cycle restoring divider (`div_seq`) computes it on the
   magnitude, truncating toward zero. The result is written into the table. A
   label that owned no sample is not written, so it keeps its old centroid.
   `hit_mask` shows which labels were written.

**Departure from the paper.** The paper computes each centroid "based on the
vertices of each Voronoi cell" and does not spell out how. This implementation
takes the area mean of the sampled region instead. The two agree only where the
sampled region is symmetric about the point that generates it.

Outer regions of a constellation are open toward the edge of the plane. Their
sampled part therefore depends on `RANGE`, and a too-large range pushes outer
centroids outward. With `RANGE` = 2.0, the end-to-end BER after training was
0.05 at Es/N0 = 16 dB. With the default `RANGE` = 1.25 (5120), it was 0.0055.
For unit-energy 16-QAM, a range of 1.25 makes the area mean of an outer region
fall on its constellation point. For strongly non-uniform learned
constellations, `RANGE` may need retuning. A vertex-based extraction would
remove this sensitivity.

## When to retrain (`perf_monitor`)

Pilots carry bits the receiver knows. In `MODE_INFER`, the monitor adds up the
wrong hard decisions over each window of `WINDOW` (1024) pilots. If a window's
count reaches `cfg_threshold` (count ≥ threshold), it raises a retrain request.
Window length, threshold encoding and the ≥ reading of "reaches a threshold"
are this implementation's choices. The paper also mentions using the
corrections of an outer error-correcting code as a trigger; no ECC is part of
this design.

## Top-level interface (`hybrid_demapper_top`)

| group | signals | notes |
|---|---|---|
| configuration | `cfg_inv_2sigma2` (Q8.8), `cfg_threshold`, `cfg_lr_shift`, `cfg_train_len`, `force_retrain` | `force_retrain` is a one-cycle pulse, acted on in `MODE_INFER` |
| ANN weights | `w_we, w_layer, w_row, w_col, w_data`; `r_layer, r_row, r_col → r_data` | layer 0..3; `w_col` equal to the layer's input count addresses the bias; writes land only while the ANN is idle |
| centroid table | `c_we, c_idx, c_data` | an extractor write in the same cycle takes priority |
| mapper table | `m_we, m_idx, m_data` | |
| transmit | `tx_valid, tx_bits → tx_out_valid, tx_sym` | 1-cycle latency |
| receive | `rx_valid, rx_sym, rx_is_pilot, rx_pilot_bits, rx_ready` | valid/ready. `rx_ready` is low only for a pilot in `MODE_TRAIN` while the ANN is still busy with the previous step |
| soft output | `llr_valid, llr[4], hard_bits, llr_is_pilot, llr_pilot_bits` | 4 cycles after acceptance, no back-pressure |
| status | `mode, retrain_count, last_errors, window_done, centroids[16], hit_mask` | |

Parameters: `GRID` = 64, `RANGE` = 5120 (1.25), `WINDOW` = 1024, `SIMD` = 1
(the ANN's inputs per cycle per layer).

Typical host sequence:

1. Load the constellation into both the mapper and the centroid table.
2. Load the ANN weights from offline end-to-end training, or random ones
   followed by `force_retrain`.
3. Set 1/(2σ²), the threshold, the learning rate and the training length.
4. Stream symbols, with pilots interleaved.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_soft_demapper` | LLRs against the max-log formula in real arithmetic (within 1 LSB), saturation, hard bits, tag, exact 4-cycle latency at up to one symbol per cycle |
| `tb_fc_layer` | with `SIMD` = 4: forward outputs, input gradients and all updated weights/biases against an integer model; cycle counts |
| `tb_demapper_ann` | whole network (inference and training steps) bit-exact against an integer model; 59/121-cycle timing; 50 back-to-back inferences in order at one per 18 cycles, with training held off meanwhile; training from random weights on noiseless 16-QAM must learn ≥ 14 of 16 labels (it learns 16). `tb_demapper_ann_simd` repeats this with `SIMD` = 4 (22/47 cycles, one result per 6 cycles, identical results) |
| `tb_sigmoid_plan`, `tb_bce_grad` | against the PLAN curve and the exact logistic; against the BCE derivative |
| `tb_centroid_extractor` | with a behavioural nearest-point "ANN" over a rotated 16-QAM with one unused label: request count, every centroid, the hit mask, no write for the empty label |
| `tb_perf_monitor`, `tb_centroid_regs`, `tb_mapper_lut` | window/threshold behaviour and clear; table writes and reads; mapping and latency |
| `tb_hybrid_demapper_top` | end to end at default sizes; see below |

The end-to-end test adds a behavioural channel: phase rotation plus AWGN at
Es/N0 = 16 dB, with one pilot in every two symbols. It runs three phases:

1. The ANN starts from random weights. A forced retraining of 6000 steps on the
   unrotated channel stands in for the offline training, followed by
   extraction.
2. Inference on the unrotated channel: BER 0.0052, and no retraining is
   requested.
3. The channel turns by π/4. The BER jumps to 0.32. The monitor starts
   retraining on its own (6000 steps). After the new extraction, the BER is
   0.027.

These figures are for the default random seed. Training quality varies with
the seed. Over six seeds, the phase 2 BER ranged from 0.002 to 0.038, and the
BER after retraining from 0.008 to 0.047. Three of the six seeds exceeded a
BER limit (0.02 after the initial training, 0.03 after retraining). The
checks are tuned to the default seed and are not a statistical guarantee.

Every LLR in the run is checked against the formula applied to the centroid
table in force for that symbol. The test also counts each mechanism and fails
if one never occurs:

- forced and monitor-triggered retraining
- the exact number of training steps
- pilot stalls
- centroid writes
- demapping during training and during extraction
- monitor windows
- mode changes

The whole run takes about 2 million cycles, a few seconds in Verilator.

Those BERs come from a simulation of this RTL at 16 dB. They are not the
paper's measurements: the paper reports, at 8 dB, 0.323 before and 0.0143
after retraining. The remaining gap to the unrotated BER after retraining comes
mostly from the short retraining and the area-mean centroids.

## How far to trust it

- The soft demapper implements the stated formula exactly, with documented
  rounding. It is the most faithful block.
- The ANN has the stated topology, loss and activations. Its training
  arithmetic (Q4.12, truncation, single-sample SGD, PLAN sigmoid) is this
  implementation's choice, and it trains successfully in simulation. The
  paper's HLS/FINN-based layers, and their parallelism, are not reproduced.
- Centroid extraction uses area means, not the paper's vertex-based centroids.
  Sampling range and grid are chosen, not given.
- Clock, retraining trigger parameters and the mode handshakes are not given
  by the paper.
- Nothing has been synthesised for an FPGA here. Resource and power figures
  of the paper (for example 1 DSP for the soft demapper) are not claimed.
  This soft demapper uses 32 multipliers for its squared distances plus 4 for
  scaling; a synthesis tool may map them to LUTs or DSPs.

## Simulating

All files are SystemVerilog 2017. `rtl/hyb_pkg.sv` must be read first. For
example, the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_hybrid_demapper_top \
    rtl/hyb_pkg.sv rtl/*.sv tb/tb_hybrid_demapper_top.sv
./obj_dir/Vtb_hybrid_demapper_top
```

A block test needs only its module and the modules it instantiates, for
example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_demapper_ann rtl/hyb_pkg.sv \
    rtl/demapper_ann.sv rtl/fc_layer.sv rtl/sigmoid_plan.sv rtl/bce_grad.sv tb/tb_demapper_ann.sv
```

Things that are easy to change:

- **Number format.** `FX_FRAC` and the widths live in `hyb_pkg`. The
  sigmoid's segment constants and the sampling `RANGE` are written for Q4.12
  and would need rescaling.
- **Extraction.** `GRID` and `RANGE` are parameters of
  `hybrid_demapper_top`.
- **Monitor window.** `WINDOW` is a parameter of `hybrid_demapper_top`.
- **Layer parallelism.** `SIMD` is a parameter of `hybrid_demapper_top`. The
  expected cycle counts in the ANN testbenches follow the formulas above.
