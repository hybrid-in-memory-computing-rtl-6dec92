# HIC layer: training a neural-network layer on phase-change memory, with the weight split across two arrays

Training a network directly inside a memory crossbar has a problem. The weight updates are tiny. A multi-level phase-change memory (PCM) device cannot absorb them: it can only be made more conductive, one coarse pulse at a time, and it saturates after a few pulses. This design splits every weight into two parts:

* **MSB part.** A *differential pair* of multi-level PCM devices, `G+` and `G-`, sits at one crosspoint of a transposable crossbar. The crossbar does the forward and backward vector-matrix products in the analog domain. Inference needs only this part, so the deployed model is about 4 bits per weight.
* **LSB part.** A 7-bit two's-complement word is stored in seven *binary* PCM devices in a separate digital array. Weight updates go here. A write is a read followed by toggling only the bits that change.

The MSB pair is programmed only when an LSB word overflows, with a single SET pulse. That is the only way training writes the crossbar. The MSB devices therefore see few pulses, and the binary devices take the frequent small writes.

The RTL implements one such layer (`hic_layer`) in SystemVerilog-2017. It covers the forward pass, the backward pass, the row-by-row weight update with carry into the crossbar, and the periodic crossbar refresh. The analog crossbar and its converters are integer behavioural models.

## 1. The weight and its carry

For the cell in row *i* and column *j*:

```
W[i][j] = (G+[i][j] - G-[i][j]) * 2^7  +  L[i][j]
          MSB pair, each 0..7 (3 bits)     LSB word, -64..63
```

* **Device levels.** Each MSB device is a level counter, 0..7 (`DEV_W = 3`). The pair therefore spans −7..+7, which is 15 levels, or roughly a 4-bit weight. Reset puts every device at level 0.
* **Forward and backward products.** Both use only `G+ − G-`. The LSB word never reaches the crossbar.
* **Update.** An update adds a quantized `dw` in −64..63 to `L` with 8-bit arithmetic (`lsb_rmw`):
  * `s = L + dw`
  * If `s` fits in 7 bits, it is the new word.
  * If it does not, the word keeps the 7-bit wrap of `s` and the cell *carries* one MSB level.
  * A positive carry gives one SET pulse to `G+`. A negative carry gives one SET pulse to `G-`.
  * Because `|dw| ≤ 64`, one update can carry at most one level. The weight value is preserved exactly: (+1)·128 + (s − 128) = s.
* **Bit flips.** The LSB array is written with a *flip mask*, `old XOR new`. Only devices whose bit changes get a pulse. `n_flips` counts them.
* **Saturation.** A SET pulse to a device already at level 7 changes nothing. It is reported on `prog_sat` and counted in `cnt_sat`. The lost carry is a real error in the weight. This is the event the refresh exists to prevent.
* **Refresh.** Every `REFRESH_BATCHES` (10) batches, each row of the MSB array is refreshed, one row per cycle. Both devices of each pair are RESET, and the difference `G+ − G-` is SET back onto one of them. The MSB value is unchanged, and one device of every pair is again at zero, with room to grow.

## 2. Data flow of the layer

```
              x_in ─► x_buf ─► DAC codes on rows
                                    │
          ┌─────────────── msb_array (G+ − G- crossbar) ───────────────┐
          │ forward: column currents        transpose: row currents    │
          └──────┬──────────────────────────────────────────┬──────────┘
            COLS × adc (FWD_SHIFT)                ROWS × adc (BWD_SHIFT)
                 │ y_a                                       │
             normalize ── y_n ──► activation (ReLU) ─► z_out  dx_out
                 ▲                    │ pos mask
           dy_a ◄┘ normalize' ◄ dy_n ◄┘ ReLU' ◄── dz_buf ◄── dz_in
            │
         dya_buf ─► DAC codes on columns (transpose)   and   outer_product
                                                             (x_buf[row] × dya_buf)
                                                                   │ grad row
                                                             optimizer: dw = q(−lr·grad)
                                                                   │
                    lsb_array ◄─ flips ─ lsb_rmw ◄── old row ── lsb_array
                                            │ ovf, ovf_neg
                                            └─► one SET pulse per overflowing cell
```

The host supplies these and reads the results:

| Input | Purpose |
|---|---|
| `x_in` | activations of the layer below |
| `dz_in` | error gradients from the layer above |
| `cfg_*` | normalization parameters, one column per write |
| `lr_load`, `lr_in`, `lr_decay` | learning rate |
| `host_prog_*` | SET pulses for initial weights |
| `batch_end` | marks the end of each training batch |

| Output | Purpose |
|---|---|
| `z_out` | activations |
| `dx_out` | gradients for the layer below |
| `stat_*` | per-column sums for batch statistics |
| `cnt_*` | event counters |

### Converters

* **DACs.** They are the code inputs of the crossbar model. An 8-bit signed code times a device level is one unit of current.
* **ADCs.** Each line has its own `adc`. It divides the line current by `2^SHIFT`, rounds half up, and saturates to a signed 8-bit code.
* **Shift values.** Defaults are `FWD_SHIFT = 4` and `BWD_SHIFT = 4`. They set the full scale and must suit the array size and the weight statistics. For example, a full column of 576 inputs at ±127 and weights at ±7 gives currents up to about ±512k. That saturates the ADC unless the weights are sparse or the shift is raised.

### Normalization and activation

* **Normalization** (`normalize`) is batch normalization per column:
  * Forward: `y_n = sat(((y_a − mu)·g) >>> 4 + beta)`.
  * Backward: `dy_a = sat((dy_n·g) >>> 4)`.
  * `g = γ/σ` is in Q3.4. The backward pass treats `mu` and `g` as constants.
  * Every forward step also accumulates `Σy_a`, `Σy_a²` and a count per column. The host derives the batch mean and variance from them, or recalibrates after the weights have drifted, and writes `mu` and `g` back. Division and square root stay on the host.
* **Activation** (`activation`) is ReLU. It remembers the positive mask of the last forward step and gates `dz` with it on the way back.

### Weight update

The update works one row at a time, over *R* = 0..ROWS−1:

1. Read LSB row *R* and form `grad[j] = x_buf[R] · dya_buf[j]`, a 16-bit signed value (`outer_product`).
2. Form `dw[j] = sat₇(round(−lr · grad[j] / 2^16))` (`optimizer`). This is plain SGD with round-half-away-from-zero. `lr` is unsigned Q0.16: it resets to 3277 (0.05), and `lr_decay` multiplies it by 29491/65536 (0.45).
3. Write the flip mask into the LSB row. In the same cycle, give one SET pulse to the MSB devices of every overflowing cell of that row.

## 3. Commands and timing (`hic_ctrl`)

Commands use a valid/ready handshake.
* `cmd_ready` is high only when the controller is idle and no refresh is pending.
* `busy` is high while a command or a refresh runs.
* `done` pulses in the last cycle of a command.
* A one-hot assertion guards the strobes the controller drives.

| `cmd_op` | What it does | Cycles after acceptance |
|---|---|---|
| `OP_FWD` (0) | latch `x_in`, crossbar VMM, ADC + normalize, ReLU | 4, `z_valid` in the 4th |
| `OP_BWD` (1) | latch `dz_in`, ReLU′, normalize′, capture `dY_A`, transposed VMM | 5, `dx_valid` in the 5th |
| `OP_UPD` (2) | update every row from the latched `X` and `dY_A` | 3·ROWS |
| `OP_INIT` (3) | clear every LSB word with a read and a flip of its set bits | 2·ROWS |
| refresh | automatic, after every 10th `batch_end` | ROWS |

* **Order.** A training step is `FWD`, then `BWD`, then `UPD`. `UPD` uses the `X` of the last forward pass and the `dY_A` of the last backward pass.
* **Batches.** Each `UPD` applies the update of one sample. A batch is the host's grouping of samples, marked by `batch_end`. To approximate a batch mean, scale `lr` by 1/batch size.
* **Host programming.** `host_prog_*` is honoured only while the layer is not busy. It gives one SET pulse per masked device, which is how initial weights are loaded (there is no RESET port other than refresh and reset).

## 4. Behavioural models and what they leave out

`msb_array` and `adc` are marked **behavioural model** in their first comment. Their arithmetic is exact, and they are written as synthesizable integer logic, but they stand in for analog circuits. In particular, the following are not modelled:

* the conductance nonlinearity of a PCM device: each pulse here is exactly one level;
* write and read noise;
* conductance drift over time;
* the device-level terminals of the bit-cells and of the sense amplifiers.

The `lsb_array` is an ordinary memory array read through a register, with one sense amplifier per bit column implied. It is written only by toggling.

## 5. Parameters and where they come from

| Parameter | Default | Origin |
|---|---|---|
| `ROWS` × `COLS` | 576 × 64 | not given; see below |
| `X_W` (DAC/ADC width) | 8 | the 8-bit converters of the architecture |
| `LSB_W` | 7 | 7 binary devices per LSB word |
| `DEV_W` | 3 | chosen: levels per device, so the pair is about 4 bits |
| `REFRESH_BATCHES` | 10 | refresh every 10 batches |
| `LR_INIT`, `DECAY` | 3277, 29491 (0.05, 0.45 in Q0.16) | the training recipe |
| `FWD_SHIFT`, `BWD_SHIFT` | 4, 4 | chosen ADC full scale |
| normalization `GF` | 4 | chosen gain format |

**Array size.** The default is sized for the largest layer of ResNet-32, a 3×3 convolution from 64 to 64 channels. Unrolled, that is 576 inputs × 64 outputs, so the whole layer fits one array. Smaller layers use a corner of the array: inputs that are not driven are held at code 0. Larger networks map a layer to several arrays. Adding the partial sums of row tiles is not part of this RTL. The crossbar model simulates quickly at this size: the full-size testbench builds and runs in well under a minute. Gate-level synthesis of the model is slow and of little use, since the real part is an analog array.

## 6. Where this RTL departs from the source architecture

* **LSB width conflict.** One drawing of the architecture labels the LSB array with 4 bits. The written description says 7 bits. 7 is used.
* **Scope.** One layer is built, not a network. The routing of activations between layers, residual additions, pooling, the classifier's softmax and the loss are host work.
* **Devices.** Devices are ideal (see §4). The device-noise ablation and the drift-over-time study therefore cannot be reproduced in this RTL. The counters do give the number of LSB bit toggles, overflow pulses, saturated pulses and refreshes, which is the raw material of an endurance estimate, but totals for the whole array, not per device.
* **Batch size.** The architecture trains with batches of 100. Here the update is applied per sample, and summing gradients before quantizing is not built.
* **Batch-norm arithmetic.** Mean, variance, division and square root are done by the host. The backward pass omits the statistics terms of the batch-norm gradient.
* **Optimizer.** SGD only, with no momentum.
* **Unspecified details.** The refresh procedure, the relative weight of MSB and LSB (a carry is worth 2^7), the ADC scaling and all cycle timing are this design's choices.

## 7. Files

* **Package.** `rtl/hic_pkg.sv` holds the widths, the types, the command enum, the strobe struct and the accumulator-width function.
* **Blocks.** `rtl/msb_array.sv`, `adc.sv`, `lsb_array.sv`, `lsb_rmw.sv`, `outer_product.sv`, `optimizer.sv`, `normalize.sv`, `activation.sv` and `hic_ctrl.sv`, plus the top, `hic_layer.sv`.
* **Unit testbenches.** `tb/tb_<block>.sv` drives one block and checks every output against arithmetic written independently in the testbench.
* **End-to-end testbenches:**
  * `tb/tb_hic_layer.sv`, at 8 × 4, keeps a full software model of the weights and checks the G+/G- levels and the LSB words after every update. Its 70 batches include 40 with the refresh withheld and the largest learning rate. It fails unless each of these happens at least once: positive and negative carries, saturation, refresh, bit flips, LSB initialisation, learning-rate decay, ReLU clamping and ADC saturation.
  * `tb/tb_hic_layer_full.sv` runs the layer at its default size: initialisation, sparse host-programmed weights, 10 training batches and the refresh they trigger.

Every testbench ends by printing `TB_RESULT checks=<n> failures=<m>` and has a watchdog.

### Simulating with Verilator

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_hic_layer \
    rtl/hic_pkg.sv rtl/*.sv tb/tb_hic_layer.sv
./obj_dir/Vtb_hic_layer +verilator+rand+reset+2
```

Replace the top module and testbench file for the other benches. Unit benches need only `hic_pkg.sv` and their block. `+verilator+rand+reset+2` initialises state randomly, which the benches expect. Nothing in the design relies on an uninitialised value. The LSB array has no reset by design: `OP_INIT` clears it.
