# Keyword spotting with in-SRAM binary convolutions and on-chip classifier fine-tuning

This is synthesizable SystemVerilog for a keyword-spotting (KWS) accelerator.
It takes one second of raw 8-bit audio (16000 samples) and picks one of ten keywords.
Almost all of the network is binary, and its convolution weights stay inside seven SRAM macros that compute in memory (IMC).
Weights are never loaded or stored during inference.

The second half of the design retrains the final classifier on the chip.
A small set of a user's own utterances (up to 90) adapts the fully connected layer to that user's voice.
Only the 192×10 classifier changes. The binary layers stay fixed, so their outputs (the 192 features after global average pooling) are computed once per stored utterance and reused in every epoch.

The design follows the accelerator published as "A 14uJ/Decision Keyword Spotting Accelerator with In-SRAM-Computing and On Chip Learning for Customization" (Chiang, Chang, Jou, IEEE TVLSI 2022).
Where that description is silent, the choices made here are listed in the section [Where this RTL departs from, or adds to, the published design](#where-this-rtl-departs-from-or-adds-to-the-published-design) and in each file's opening comment.

## Network and dataflow

| stage | operation | channels | kernel | pool | positions (16000 in) | hardware |
|---|---|---|---|---|---|---|
| L1 | binarized sinc convolution on 8-bit audio | 48 | 15 | 4 | 3996 | `sinc_conv`, 8 digital PEs |
| L2 | binary group conv, 24 ch/group | 48 | 8 | 4 | 997 | `imc_layer`, 1 macro |
| L3 | binary group conv | 96 | 8 | 2 | 495 | `imc_layer`, 1 macro |
| buffer A | feature map FIFO (495 × 96 bit) | | | | | `fm_buffer` |
| L4 | binary group conv | 96 | 8 | 2 | 244 | `imc_layer`, 1 macro |
| L5 | binary group conv | 192 | 8 | 2 | 118 | `imc_layer`, 2 macros |
| buffer B | feature map FIFO (118 × 192 bit) | | | | | `fm_buffer` |
| L6 | binary group conv | 192 | 8 | 2 | 55 | `imc_layer`, 2 macros |
| GAP | average of the 55 binary vectors → 192 × Q3.4 | 192 | | | 1 | `gap` |
| FC | 192 → 10, 8-bit weights, 16-bit bias | 10 | | | | `fc_layer` |

All convolutions are "valid" (no padding), with stride 1.
Pooling is non-overlapping; an incomplete last window is dropped.
A pooled binary value is the OR of its window, which is the max of {0,1}.

Every stage is a valid/ready stream, so the whole chain runs as one pipeline while the audio arrives.
The pace is set by layer 1: each input sample costs one accept cycle plus six PE cycles, because 8 PEs cover 48 channels.
That gives 7 cycles per sample and about 112k cycles per decision.
Every later layer finishes a position faster than its producer delivers the next one, so in practice no stage ever holds a finished output.

### Layer 1: sinc convolution

A 15-sample window sits in a shift register.
Each of the 8 PEs XNORs every 8-bit sample with its binary tap weight:
- weight 1 passes the two's complement sample x unchanged;
- weight 0 inverts its bits, which gives −x−1.

The PE adds the 15 terms and a 12-bit batch-norm bias. The channel output is 1 when the sum is ≥ 0.

## The IMC macro and how a layer is mapped onto it

`imc_macro` is a behavioural model of the analog macro.
It has 8 banks of 64×64 cells. A compute step drives one 64-bit input vector onto the bitlines of all banks and reads one wordline in each.
Each bank adds +1 for every column where input and weight agree and −1 where they differ.
The sense amplifier (SA) outputs 1 when the accumulated sum is ≥ 0.
A partial sum can be carried across several wordline reads: `cmp_first` starts a new sum, and `cmp_last` fires the SA.
A parameter `MAV_OFFSET` adds a fixed offset per bank. It stands for the mismatch of the averaging lines and of the SA, and it is zero by default.

Each output of a group convolution sees 24 input channels over 8 taps, which is 192 bits.
`imc_layer` lays out one output channel as four consecutive wordlines of one bank:

| row | content | input on the bitlines |
|---|---|---|
| 4q+0 | weights of window bits 0–63 | window bits 0–63 |
| 4q+1 | weights of window bits 64–127 | window bits 64–127 |
| 4q+2 | weights of window bits 128–191 | window bits 128–191 |
| 4q+3 | batch-norm row | all ones |

- **Window order.** The window is tap-major: bit `t*24+c` is tap t (0 = oldest) of channel c of the output's group.
- **Which bank and step.** Output o lives in bank `o % 8` and is computed in step `q = o / 8`. One step therefore produces eight outputs in 4 cycles.
- **Batch norm as a wordline.** The BN row, read with all inputs at 1, adds Σ W_i. This is an even bias in [−64, 64] that folds in the batch norm (and any offset compensation).
- **Negative BN scale.** A negative scale flips the comparison. The bias row cannot express that, so `imc_digital` XORs the SA bit with a per-channel flip bit.
- **Shuffle and pool.** `imc_digital` moves the bit to its shuffled position: channel `g*n+i` of G groups with n per group goes to `i*G+g`. It then OR-pools the bit.
- **Two-macro layers.** Layers 5 and 6 have 24 steps, which needs 96 rows. They use two macros: steps 0–11 in macro 0 and steps 12–23 in macro 1, run one after the other.

This mapping fills the rows of the macros as 24/64, 48/64, 48/64 and 2 × 48/64 for L2–L6 (L5 and L6 use 2 × 48/64 each).
It keeps the per-layer output rate of the published utilisation figures.

The line buffer holds the last 8 input vectors of a layer in flip-flops.
Per position a layer needs 1 accept cycle, then 4 cycles per step, then 1 cycle for the last SA result: 26 cycles for L2 and 98 for L5 and L6.

### Test mode

A 192-bit pattern is shifted into `test_reg` one bit per cycle, LSB first.
`test_start` with `test_layer` (2–6) and `test_step` then runs one step of that layer on the pattern instead of its line buffer.
The eight raw SA bits, before the flip and the shuffle, are captured and shifted out on `test_so`, LSB first.
Comparing them with the expected XNOR sums measures the offset of every bank of every macro.

## Fixed-point formats of the classifier

| quantity | format |
|---|---|
| GAP activation | Q3.4 (8 bit): `round(16·(2·ones − N)/N)`, halves away from zero |
| FC weight, output error | Q0.7 (8 bit) |
| FC accumulator, FC bias, gradient sum | 16 bit or wider, LSB = 2⁻¹¹ (= Q3.4 × Q0.7) |
| logit | Q3.4, `sat((acc + 64) >>> 7)` |

`fc_layer` does one input index per cycle: the 80-bit weight word of that index holds 10 weights, and 10 MACs run in parallel.
A decision takes 192 cycles, and `done` comes two cycles after the last feature.
The class is the first index of the largest logit.

## On-chip fine-tuning

### Storing the features

With `store_en` high during an utterance, the 192 GAP outputs are written to slot `store_slot` of the feature memory (90 × 192 bytes).
`store_label` is written with them.

### Training run

`train_start` runs `train_ctrl` over `train_n_samples` slots for `train_epochs` epochs:

1. **Clear.** The gradient memory (192 × 10 × 16 bit) is cleared, once per run.
2. **Per sample: forward.** The 192 stored features are streamed into `fc_layer`.
3. **Per sample: error.** `ce_module` computes the softmax cross-entropy error `p_i − y_i`:
   - exp(z) comes from a 256-entry table, one entry per possible Q3.4 logit. Each entry is `exp(n/16)` in unsigned Q12.12. It is computed at elaboration by repeated multiplication with exp(±1/16).
   - The exponentials are summed. Each is divided by the sum with an 8-bit restoring divider, giving p in Q0.7.
   - 1.0 (128) is subtracted for the label class.
   - The result is scaled by 1.375 = 1 + 1/4 + 1/8 using shifts and adds, then clamped to 8 bits. The scale compensates for errors being applied sample by sample instead of averaged over a batch: the software scale 128 divided by the batch of 90 is about 1.42, rounded to a shift-and-add value.
   - This takes 101 cycles.
4. **Per sample: bias update.** The FC biases are updated: `b −= (err·2⁴) >>> lr_shift`.
5. **Per sample: gradient accumulation.** The features are streamed again into `sga_module`, which accumulates `err_o · act_i` into gradient word i with 16-bit saturation. This is a read-modify-write, one word per cycle.
6. **Per epoch: update pass.** After the last sample, one `sga_module` pass walks the gradient memory:
   - Where `|g| ≥ sga_thr`, it applies `w −= round(g / 2^(4+lr_shift))` with 8-bit saturation and resets g to zero.
   - Smaller gradients are kept and keep accumulating over the following epochs. This is the "small gradient accumulation" that lets tiny gradients still move an 8-bit weight.
   - `sga_updates` reports how many weights changed in the last pass.

### Memory sharing

The FC weight memory has one port pair. The host configuration and the update pass write it; the update pass and the FC layer read it.
They never overlap, and an assertion in the top checks this.

## Configuration and host interface

### Configuration port

All state is loaded through one port: `cfg_we` with a packed `cfg_t` word from `kws_pkg`.
`cfg_t.tgt` selects the target:

| target | field use |
|---|---|
| `CFG_SINC_W` | addr = channel; data = 15 tap bits, bit t for the t-th oldest sample |
| `CFG_SINC_B` | addr = channel; data = 12-bit bias |
| `CFG_IMC_W` | layer, macro, bank; addr = row; data = 64-bit wordline |
| `CFG_BN_FLIP` | layer; addr = 64-channel chunk |
| `CFG_FC_W` | addr = input index; data = 10 × 8-bit weights |
| `CFG_FC_B` | addr = class; data = 16-bit bias |

### Running an inference

1. Pulse `frame_start` before each utterance.
2. Stream the samples with `in_valid`/`in_ready`.
3. `res_valid` pulses with `res_class` and `res_logits`.

`res_valid` is suppressed while training runs.

## Where this RTL departs from, or adds to, the published design

### Throughput and memory

- **Latency.**
  - The published chip needs 160k cycles per decision (160 ms at 1 MHz).
  - This RTL needs about 112k cycles (7 per sample), or 118k with the random input gaps used in the full-size test.
  - The published schedule is not described in enough detail to reproduce it.
- **Digital SRAM total.**
  - The chip lists 24 KB of digital SRAM. The memories here add up to about 31.8 KB:
    - feature memory for 90 samples: 17,280 B;
    - gradient memory: 3,840 B;
    - FC weights: 1,920 B;
    - buffer A: 5,940 B;
    - buffer B: 2,832 B.
  - The chip evidently packs features or buffers more tightly. How it does so is not published.

### Arithmetic and formats

- **Padding, stride and pooling remainder** are not specified. Valid convolution with stride 1 was chosen.
- **Gradient width.**
  - The fine-tuning format lists the gradient as 1 sign + 7 fraction bits.
  - Here the per-sample product is exact and the gradient memory keeps a 16-bit sum. Without that, gradients below one weight step could not accumulate.
- **BN polarity, shuffle formula and GAP rounding** are choices of this design, as described above.
- **Exp table format, divider type and the bias-update shift** are choices of this design.

### Not built

- **Error scale.** The scale is fixed at 1.375 in hardware. The per-dataset scale search is a software step.
- **Random gradient prediction.** Adding Gaussian noise to predicted gradients is evaluated in software only and is not part of the chip's training datapath, so it is not built.
- **Learning-rate schedule.** Halving the rate every 10 epochs is left to the host: it restarts training with a new `lr_shift`.
- **Analog parts.** The 8T cells, the charge-sharing averaging and the SA exist only as the behavioural model `imc_macro`. So do the offset compensation and its statistics, through `MAV_OFFSET` and the BN row.
- **Pads and clocking** are not included.

## Files

### RTL (`rtl/`)

| file | content |
|---|---|
| `kws_pkg.sv` | sizes, formats, `cfg_t`, `layer_len`, `shuffle_idx`, `exp_q12` |
| `sinc_conv.sv` | layer 1 |
| `imc_macro.sv` | behavioural IMC macro |
| `imc_layer.sv` | IMC controller + macros + `imc_digital` |
| `imc_digital.sv` | BN flip, channel shuffle, OR pooling |
| `fm_buffer.sv`, `sram_1r1w.sv` | FIFO and generic memory |
| `gap.sv`, `fc_layer.sv` | classifier path |
| `ce_module.sv`, `sga_module.sv`, `train_ctrl.sv` | training |
| `test_reg.sv` | test-mode scan register |
| `kws_top.sv` | top level |

### Testbenches (`tb/`)

There is one self-checking testbench per module, `tb_<module>.sv`. Each prints `TB_RESULT checks=… failures=…` and has a watchdog.

`tb_kws_top` runs the whole chip at a reduced utterance length of 2234 samples. That is the shortest length that leaves two positions after layer 6. It does the following:

- **Configuration.** It loads random weights and keeps its own reference model of the full network.
- **Inference checks.** It checks the logits and class of five utterances, and the features stored in the feature memory.
- **Training.** It trains two epochs on three stored samples and requires the label margin to grow.
- **Inference after training.** It checks an inference with the trained weights.
- **Test mode.** It reads out test mode on L2, on L5 macro 1 and on L6 macro 1.
- **Mechanism coverage.** It counts each mechanism and fails if any is missing:
  - input stall;
  - use of both feature buffers;
  - second-macro computes;
  - feature store;
  - bias update;
  - weight update;
  - kept sub-threshold gradients;
  - test read-out;
  - inference after training.

`tb_kws_full` does the same at the default 16000-sample size, with one stored sample and one epoch. It takes about 2 minutes with Verilator.

### Simulating with Verilator

Example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/kws_pkg.sv tb/tb_kws_top.sv --top-module tb_kws_top -Mdir obj -o sim
./obj/sim +verilator+rand+reset+2
```

`+verilator+rand+reset+2` gives uninitialised state random values. Everything that is read is reset or configured, so the result does not depend on the seed.
