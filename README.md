# A 70 ns anomaly detector for a collider trigger: the encoder of a variational autoencoder in RTL

A first-level trigger at the LHC sees a new proton-proton collision every 25 ns
and has a few microseconds to decide whether to keep it. Most selection
algorithms look for a known signature (an energetic lepton, a jet). The design
here looks for the *unusual* instead: a small neural network, trained only on
ordinary collisions, maps every event to a point in a three-dimensional latent
space. Ordinary events land close to a unit Gaussian; events the network has
not learned to describe land far from it. The distance, a Kullback-Leibler
divergence, is the anomaly score, and a threshold on it is the trigger bit.

The network and its scoring method come from the published study of
autoencoders for unsupervised new-physics detection in the level-1 trigger
(Govorkova et al., "Autoencoders on FPGAs for real-time, unsupervised new
physics detection at 40 MHz at the Large Hadron Collider"). That study generated
its firmware with a high-level-synthesis tool. This repository gives the same
network as hand-written, parameterized SystemVerilog. It covers the model that
study selected for deployment, the dense variational autoencoder with the KL
score. The arithmetic details that the study does not publish are filled in
here. Each of them is listed below.

## What the circuit computes

Input: one event per clock, 19 objects x 3 features.

| objects | index `o` |
|---|---|
| muons | 0-3 |
| electrons | 4-7 |
| jets | 8-17 |
| missing transverse energy (MET) | 18 |

The three features are pT, eta and phi (`f` = 0, 1, 2). MET has no eta, so
that entry is 0. An object that is absent is all zeros. The 57 features are
flattened as `x[3*o + f]`.

```
x(57) -> BN -> Dense 57x32 -> BN -> LeakyReLU -> Dense 32x16 -> BN -> LeakyReLU
      -> Dense 16x3 = mu
      -> Dense 16x3 = log(sigma^2)
      -> score = 1/2 * sum_i ( mu_i^2 + sigma_i^2 - log(sigma_i^2) - 1 )
      -> accept = score > threshold
```

BN is a batch normalization. At inference it is a per-feature multiply and
add: `y = x*scale + shift`. The first BN takes the place of any input
pre-processing, so the raw detector quantities go straight in.

Only the encoder of the autoencoder is built. A decoder would reconstruct
the input. It is not needed here, because the score uses only the encoder's
latent Gaussian. This also removes two costs: no random numbers are drawn, so
the decision is deterministic, and no copy of the input is buffered.

### Pipeline and timing

| stage | module | cycles |
|---|---|---|
| input BN | `ae_batchnorm` | 1 |
| dense 57x32 | `ae_dense` | 2 (products; adder tree + bias) |
| BN, leaky ReLU | `ae_batchnorm`, `ae_leaky_relu` | 1 + 1 |
| dense 32x16 | `ae_dense` | 2 |
| BN, leaky ReLU | `ae_batchnorm`, `ae_leaky_relu` | 1 + 1 |
| mu and log sigma^2 heads | `ae_latent_heads` (two `ae_dense`) | 2 |
| KL score | `ae_kl_divergence` | 2 (square and exp table; sum) |
| threshold | `ae_trigger_decision` | 1 |
| **total** | `ae_vae_encoder_top` | **14** |

- Every multiplier exists once per weight (57x32 + 32x16 + 2x16x3 = 2432
  multipliers), so a new event enters every cycle.
- The latency is 14 cycles, 70 ns at 200 MHz. The published figures for this
  model are 80 ns latency and 5 ns initiation interval at 200 MHz.
- A `valid` bit travels with each event. There is no back-pressure: a trigger
  cannot stall the collider.
- `mu` and `log_var` are delayed to come out in the same cycle as the score,
  for monitoring.
- The top checks in simulation that `out_valid` is `in_valid` delayed by
  exactly `LATENCY` cycles.

## Number formats

The published model uses 8-bit fixed point: post-training quantization of a
network pruned to 50 % sparsity. How those 8 bits are split, and how results
are rounded, is not published. This design uses two's complement throughout;
a format `<W,F>` has value `integer / 2^F`.

| quantity | format | range / step |
|---|---|---|
| raw input | `<16,2>` | e.g. pT in 0.25 GeV steps |
| activations, biases, BN shifts, mu, log sigma^2 | `<8,4>` | -8 ... 7.9375 |
| weights, hidden BN scales | `<8,6>` | -2 ... 1.984 |
| input BN scale | `<8,8>` | -0.5 ... 0.496, so that 1/30 of a raw pT is representable |
| exp table, mu^2 | unsigned, 8 fraction bits | |
| score | 24-bit unsigned, 8 fraction bits | |

Every requantization follows the same two rules:

- **Rounding.** Truncate toward minus infinity (an arithmetic right shift).
- **Overflow.** Saturate to the output width.

In `ae_dense` the sum of all products and the bias is exact; only the final
result is requantized. The leaky ReLU slope is not published. It is 0.3, the
usual library default, stored as 77/256.

All of these values are constants in `ae_pkg`. Each module takes its widths
as parameters.

## The KL score in hardware

Per latent dimension the score needs `mu^2`, `sigma^2` and `log sigma^2`.
The latent head outputs `log sigma^2` directly, not sigma. The published text
speaks of sigma, but this is the usual VAE parametrization, and it reduces the
score to one square, one exponential and additions:

```
term_i = mu_i^2 + exp(lv_i) - lv_i - 1        (all with 8 fraction bits)
score  = (term_0 + term_1 + term_2) >> 1
```

- The exponential is a 256-entry table indexed by the raw 8-bit code of `lv`.
  It is filled at elaboration with `$exp`: entry `k` is
  `floor(exp(s(k)/16) * 256)`, where `s(k)` is `k` read as a signed byte.
  The largest entry, about 7.2e5, fits the 20-bit entry width.
- Each term is non-negative in exact arithmetic, because `e^x >= 1 + x`.
  Truncation in the table can push a term slightly below zero, so each term
  is clamped at 0.
- An input of mu = 0 and lv = 0 (the unit Gaussian) scores exactly 0.

## Coefficients

The trained weights are not published. So the weights, biases and BN
constants are not synthesis constants here: they are loaded at run time into
`ae_coeff_regs`. It holds one byte per coefficient, 2699 bytes in all.

- **Write.** Set `cfg_we`, `cfg_addr` and `cfg_wdata`. The write is visible on
  the next cycle.
- **Read-back.** `cfg_rdata` shows the byte at `cfg_addr` one cycle later.
  Addresses past the end are ignored on write and read as 0.
- **Pruning.** 50 % pruning shows up only as zero weights. The multipliers
  stay, unlike in firmware that is generated with the weights as constants.

The address map is in `ae_pkg`. Weight `w[j][i]` of a layer, for output `j`
and input `i`, is at `OFF_<layer>_W + j*N_inputs + i`.

| region | bytes | content |
|---|---|---|
| `OFF_BN0_S`, `OFF_BN0_B` | 57 + 57 | input BN scale, shift |
| `OFF_D1_W`, `OFF_D1_B` | 1824 + 32 | dense 1 |
| `OFF_BN1_S`, `OFF_BN1_B` | 32 + 32 | BN after dense 1 |
| `OFF_D2_W`, `OFF_D2_B` | 512 + 16 | dense 2 |
| `OFF_BN2_S`, `OFF_BN2_B` | 16 + 16 | BN after dense 2 |
| `OFF_MU_W`, `OFF_MU_B` | 48 + 3 | mu head |
| `OFF_LV_W`, `OFF_LV_B` | 48 + 3 | log sigma^2 head |
| `OFF_THR` | 3 | threshold, little-endian, same format as the score |

Folding a trained batch-normalization layer into these two constants:

- `scale = gamma / sqrt(var + eps)`
- `shift = beta - mean * scale`

The threshold is written one byte at a time. While the three writes are under
way, the decision stage can see a mix of old and new bytes. To change the
working point cleanly, pause the event stream for `LATENCY` cycles, or accept
that a few events are judged against a mixed threshold.

## Files

| file | content |
|---|---|
| `rtl/ae_pkg.sv` | sizes, formats, address map, `LATENCY` |
| `rtl/ae_batchnorm.sv` | affine per-feature normalization, 1 stage |
| `rtl/ae_dense.sv` | fully parallel dense layer, 2 stages |
| `rtl/ae_leaky_relu.sv` | leaky ReLU, 1 stage |
| `rtl/ae_latent_heads.sv` | the two 16->3 heads |
| `rtl/ae_kl_divergence.sv` | KL score with exp table, 2 stages |
| `rtl/ae_trigger_decision.sv` | threshold compare, 1 stage |
| `rtl/ae_coeff_regs.sv` | coefficient register file |
| `rtl/ae_vae_encoder_top.sv` | the complete detector |
| `tb/ae_ref_pkg.sv` | bit-exact reference model (integer arithmetic, real `exp`) |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_ae_top` |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. It also
has a watchdog that counts a failure if the test hangs. For example:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/ae_pkg.sv tb/ae_ref_pkg.sv rtl/ae_[b-z]*.sv tb/tb_ae_top.sv \
  --top-module tb_ae_top -Mdir obj_top && obj_top/Vtb_ae_top
```

`tb_ae_top` runs the detector at its default size, end to end:

1. It loads random coefficients, with about half of the weights zero, and
   reads back all 2699 bytes.
2. It generates 300 events. Some have few objects; some have very high pT,
   which drives the hidden layers into saturation.
3. It sets the threshold to the median reference score and streams the
   events back to back, with occasional idle cycles.
4. It compares `score`, `accept`, `mu` and `log_var` of every event with the
   reference model.
5. It checks the 14-cycle latency, which is within the published 16-cycle
   (80 ns) budget.
6. Midway, it drains the pipeline and raises the threshold to the
   90th-percentile score.

It also counts how often each mechanism happened and fails if one never did:
accept, reject, back-to-back events, gaps, saturation, the negative branch of
the leaky ReLU, and the threshold change.

The block testbenches run each module at its default or in-design size with
random and directed stimulus. Among the directed cases:

- every 8-bit code for the leaky ReLU;
- every log-variance code for the exp table;
- scores equal to, one above and one below the threshold.

Changing the coefficients on every cycle in these tests is deliberate. It
caught an early bug in which the dense layer's bias was not kept aligned with
its pipelined products.

## How far to trust it, and where it departs from the published design

Taken from the published design:

- the input shape (19 x 3, objects in the order muons, electrons, jets, MET);
- the layer sizes 57-32-16-3 and the batch normalization and leaky ReLU after
  each hidden layer;
- the input batch normalization in place of pre-processing;
- the two latent heads and the KL divergence as the anomaly score;
- a threshold on that score;
- the 8-bit word;
- an initiation interval of one clock and a latency within 80 ns at 200 MHz.

Choices of this design, not published:

- the fixed-point split, truncation and saturation;
- the leaky ReLU slope, 0.3;
- outputting log sigma^2 instead of sigma;
- the exp table;
- where the pipeline registers sit;
- run-time loadable coefficients and their address map;
- the strict comparison `score > threshold`;
- a synchronous active-low reset that clears only the valid bits. Data
  registers and coefficients are not reset, so load the coefficients before
  sending events.

What it does not claim:

- **Same scores as the published model.** Its weights are not available, so
  the tests check the RTL against its own bit-exact reference, not against
  physics results.
- **Resource use and timing closure.** Neither has been measured. With
  loadable weights, every multiplier is a real 8x8 multiplier, where
  constant-weight firmware would shrink or remove many of them.

Not included:

- the trigger-board infrastructure and link buffers used in the published
  board test: the event input and the score/accept outputs are plain ports to
  connect to them;
- the decoder, Gaussian sampling and reconstruction-error score of a full
  autoencoder;
- the convolutional variants the study compared. None of these is part of the
  deployed detector.
