# Scale-Dropout compute-in-memory accelerator

A binary neural network can be made Bayesian cheaply if the randomness is put
where there is little of it to pay for. Instead of dropping individual neurons
or weights, this accelerator drops whole *scale vectors*: every layer of a
binary network multiplies its ±1 weighted sums by a learned per-channel scale,
and during Monte-Carlo inference that scale vector is, with the layer's dropout
probability, replaced by the all-ones vector ("unitary" scale dropout). One
random bit per layer per forward pass is therefore all the randomness the
network needs, and it comes from a single stochastic spintronic device shared
by all layers. Repeating the forward pass T times and averaging the outputs
gives a predictive mean whose spread across passes expresses the model's
uncertainty.

The RTL models the whole inference datapath: SOT-MRAM crossbar arrays doing
the XNOR-popcount in the analog domain, column ADCs, digital accumulation of
row tiles, the scale memory and the dropout multiplexer, multiplication,
batch normalisation, sign activation, a skip-connection buffer, the averaging
block and the controller that sequences layers, convolution windows and
forward passes. At its default size (ten 256 × 256 arrays, five layers) it
runs a LeNet-5 end to end.

## Dataflow of one layer

```
 activation bank ──► crossbar array (128 inputs x 256 columns, one per row tile)
                         │ column currents
                         ▼
                    column ADCs (match count m per column)
                         │
                         ▼
     accumulator-adder: sum += 2m - n, saturated to 8 bits ◄── tiles of a layer
                         │
                  partial-sum register (256 x 8 bit)
                         │ one channel per cycle
                         ▼
 scale SRAM (layer, channel) ─► 2:1 mux ◄─ mask bit d from the Spin-ScaleDrop module
                         │        d = 1: learned scale, d = 0: 1.0
                         ▼
                   multiplier (8 x 32 bit)
                         ▼
      batch norm  zhat = floor(p·A / 2^16) + B   (A, B from a second SRAM)
                         ▼
   (+ skip value) ─► sign ─► next activation bank / output logit ─► averaging
```

### Crossbar and ADC

Each weight is stored in a complementary pair of SOT-MTJ cells on two
adjacent rows, one in the low- and one in the high-resistance state. An input
of +1 activates the first row of the pair, −1 the second, so a column sees the
low-resistance cell exactly when input and weight agree (XNOR). With m
agreements among n active inputs the column current is
`m·I_LRS + (n−m)·I_HRS`. A 256-row array therefore holds 128 logical inputs of
256 output columns. `sot_crossbar` is a behavioural model with real-valued
currents (LRS 1 MΩ, HRS 2 MΩ, 0.1 V read voltage; these values are
placeholders, since only their ratio matters to the ADC). `xbar_adc` subtracts
the all-HRS current of the active inputs, divides by the LRS–HRS step, and
rounds to an 8-bit match count. Device variation, wire resistance and sneak
paths are not modelled.

### Row tiles and saturation

A layer with more than 128 inputs is split into row tiles, one per array, held
in consecutive arrays. The controller reads the tiles one after another
(crossbar read, ADC conversion and accumulation each take one cycle) and the
accumulator-adder adds `2m − n` — the ±1 dot product of the tile — to the
running sums. Sums saturate at the signed 8-bit range, the width of the
partial-sum register. Saturation only clips large dot products, so the sign
that follows is unaffected unless batch normalisation moves the threshold past
±127.

### Scaling, dropout and normalisation

After the last tile the 256 sums are processed one channel per cycle through a
four-stage pipeline:

| stage | action |
|-------|--------|
| 0 | read the sum and the scale word of (layer, channel) |
| 1 | select scale or 1.0 by the mask bit, multiply (8 × 32 → 40 bits) |
| 2 | batch norm with folded coefficients A, B (Q16.16), floor of the product |
| 3 | optional skip add, sign, write the activation or emit the logit |

Scales and coefficients are signed Q16.16, so 1.0 is `32'h0001_0000`. Batch
norm is folded to one multiply-add per channel: `A = γ/√(σ²+ε)`,
`B = β − μ·A`. A bias term of the fully connected layer can be folded into B as
well; there is no separate bias adder. The sign maps a value ≥ 0 to +1.

The output-layer value before the sign (saturated to 32 bits) is the logit
passed to the averaging block.

### Spin-ScaleDrop: the random bit

The random source is one SOT-MTJ whose switching is stochastic. A SET pulse
through the heavy-metal track switches it to the antiparallel state with a
probability `1 − exp(−t/τ)` that grows with pulse length; the write current
sets τ, and with it the dropout probability. A sense amplifier reads the state
through the separate read path, and a RESET pulse of opposite polarity
restores the parallel state. In the model, `p_keep` (out of 256) is the
switching probability of one full SET pulse and stands for the write current;
a switched device means "keep the scale" (d = 1). Process and in-field
variation shift the probability by a Gaussian amount; the parameters
`P_OFFSET` (mean) and `P_SIGMA` (spread) add such a shift, drawn anew at every
SET and clipped to [0, 1], so a network can be checked against a device whose
dropout probability is a few percent off. Both are 0 by default.

`scaledrop_seq` drives the device: SET for 10 cycles, RESET for 5 cycles,
sensing in the first RESET cycle, so one bit takes 15 cycles, i.e. 15 ns at
the assumed 1 ns clock — matching the sampling latency the device was
characterised with. The controller requests the bit at the start of a layer,
so the 15 cycles overlap the crossbar reads; a layer with fewer than four row
tiles waits a few cycles for its bit before the channel pipeline starts. Each
layer has its own `p_keep`, so small layers can use 10–20 % dropout and large
ones 50 %.

### Convolutions: one unrolled kernel per column

A convolutional layer with K × K kernels over C_in input channels is stored
with each output channel's kernel unrolled into one crossbar column of
K·K·C_in inputs, split into 128-input row tiles like any other layer. Feature
maps are kept pixel by pixel with the channels of a pixel adjacent
(`index = (y·W + x)·C + c`), so one kernel row of an output position is K·C_in
consecutive bits of the map. For each output position the controller gathers
the patch into a register, one kernel row per cycle, then reads the row
tiles and streams all output channels through the pipeline exactly as for a
vector layer, writing each result to `(pixel·C_out + channel)`. All positions
of a layer in one forward pass share the layer's mask bit. Stride is 1 and
there is no padding.

Optional 2 × 2 max-pooling is done in the write path. The pooled value of four
±1 outputs is +1 if any of them is +1, i.e. the OR of their bits, and because
the sign is monotone this equals pooling before the sign. The output bank is
cleared when a pooled layer starts and every result is OR-written into its
pooled pixel; odd trailing rows or columns are dropped.

With the default 1280-bit banks, the classic LeNet-5 (32 × 32 input,
conv 5×5→6, pool, conv 5×5×6→16, pool, 400→120→84→10) fits: its kernels
take 1 and 2 arrays, the vector layers 4, 1 and 1, and its largest map
(14 × 14 × 6 = 1176 bits) fits one bank. A point-estimate pass takes 18,355
cycles, nearly all in the 784 positions of the first convolution.

### Skip connections and activation buffers

The activation buffer has three banks: bank 0 holds the network input (loaded
32 bits at a time), banks 1 and 2 alternate as output and input of successive
layers. A layer marked `save_skip` also writes its pre-sign values to the skip
buffer; a later layer marked `add_skip` adds them channel by channel before its
own sign, which is how residual networks sum a shortcut with a later layer's
output.

### Monte-Carlo inference and averaging

`mc_en = 1` with `n_runs = T` repeats the forward pass T times from the same
input, each layer drawing a fresh mask bit in every pass. The averaging block
sums each class's logit over the passes (40-bit sums) and divides by T; `mean`
holds the predictive mean when `done` pulses. `mc_en = 0` gives the ordinary
point estimate: every mask bit is forced to 1 and no random bit is drawn.
Alongside each sum the block keeps a sum of squared logits (72 bits), and
`variance` gives the population variance of the T passes,
(T·Σy² − (Σy)²) / T², truncated, in Q32.32 — the spread that serves as the
uncertainty estimate. Confidence intervals need percentiles of the passes and
are not computed in hardware; the per-pass logits are visible on
`out_valid/out_cls/out_logit/out_run` for that purpose.

## Controller and layer descriptors

`cim_controller` holds one descriptor per layer (`sd_pkg::layer_desc_t`):

| field | meaning |
|-------|---------|
| `first_xbar`, `n_tiles` | arrays holding the layer's row tiles |
| `in_len`, `out_len` | number of inputs (≤ 128·n_tiles) and outputs (≤ 256) |
| `p_keep` | keep probability ×256 (e.g. 230 ≈ 10 % dropout, 128 = 50 %) |
| `save_skip`, `add_skip` | write to / add from the skip buffer (vector layers) |
| `conv`, `k`, `in_w`, `c_in` | convolution: kernel size, square input width, input channels (`in_len = k·k·c_in`, `out_len` = output channels) |
| `pool` | 2 × 2 max-pool of the convolution outputs |

Per layer it passes through LSTART (request the mask bit, clear the bank of
a pooled layer), GATHER (convolutions only, K cycles), READ/ADC/ACC per tile,
WAITD (wait for the bit), CH (one channel per cycle), DRAIN (empty the
pipeline) and LEND (swap banks, next layer or next pass); a convolution
returns from DRAIN to GATHER for each further output position. In
point-estimate mode a vector layer takes `3·n_tiles + out_len + 7` cycles and
a convolution with P output positions `2 + P·(K + 3·n_tiles + out_len + 5)`;
a pass adds 2. With dropout, the first position of a layer with fewer than
four tiles (or a short gather) waits for the 15-cycle mask bit.

Assertions check that a descriptor stays inside the arrays and their width,
that a convolution's shape is consistent and its maps fit a bank,
that no bit is requested while the dropout device is busy, that the
accumulator only stores converted codes, and that each pipeline stage only
fires on a valid result of the stage before it.

## Using the top level

`scaledrop_cim_top` defaults: ten 256 × 256 arrays, five layers, ten classes,
8-bit ADCs, 10 + 5 cycle dropout sampling. While idle, program it through
`w_*` (one weight bit of one array: `w_xbar`, logical row, column, bit),
`sc_*` (scale word per layer and channel), `bn_*` (`{A, B}` per layer and
channel), `in_ld_*` (input bits, 1 = +1) and `desc_*`; set `n_layers`,
`n_runs` and `mc_en`, pulse `start`, and wait for `done`.

## Where this design departs from, or adds to, the source architecture

* The number formats (Q16.16, folded batch norm, saturation of the 8-bit sum),
  the tile mapping, the controller, the descriptor table and all cycle timing
  are this design's own.
* A dropped scale becomes 1.0, not 0. The architecture drawing prints "0" at
  that multiplexer input while the method it implements sets the dropped scale
  vector to ones; the method is followed.
* One Spin-ScaleDrop device serves all layers. An energy estimate elsewhere
  counts ten such modules for a LeNet-5; the single shared device is the
  architecture's stated point and is what is built.
* Convolutions use the unrolled-kernel mapping only; the alternative of
  splitting a kernel over K × K smaller C_in × C_out arrays is not built.
  Stride 1 without padding, square maps, and skip connections only between
  vector layers are this design's limits, so the padded and strided
  convolutions of VGG and ResNet networks, and the up-sampling of
  segmentation networks, do not run; their weights would not fit ten arrays
  and five layers anyway.
* Max-pooling is not part of the source architecture; it is added in the
  cheapest form (OR-writes) because LeNet-5 needs it.
* There is no bias adder. With unitary dropout the bias would be scaled by
  the randomly chosen scale, so it cannot be folded exactly into the batch
  norm offset; a network for this datapath is trained without bias.
* Variance is computed on the output logits; confidence intervals are not
  computed in hardware (see above).
* Crossbar read/write decoders and line-conditioning circuits are folded into
  the crossbar model's programming and row-enable ports.

## Verification

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`) that
compares against values computed independently in the testbench, and prints
`TB_RESULT checks=N failures=M`. Notable ones:

* `tb_spin_scaledrop` measures the switching rate of repeated SET/RESET
  cycles for several probability codes against a binomial tolerance, and
  checks that RESET restores the device, that a too-short RESET does not, and
  that a shorter SET switches less often; a second device with a +0.1 mean
  shift and 0.05 spread must switch at the shifted rate.
* `tb_scaledrop_seq` checks the 15-cycle sampling latency and that the bit is
  the one sensed in the first RESET cycle.
* `tb_cim_controller` checks the cycle count of each layer and the order of
  the control strobes, and for a pooled convolution the patch applied at
  every output position and the pooled write index of every result.
* `tb_scaledrop_cim_top` runs the top at its default size: a five-layer
  network (a 300 → 200 vector layer, a pooled 3 × 3 convolution to 256
  outputs, 256 → 128, 128 → 128 with a residual sum, 128 → 10; 10 %, 20 % and
  50 % dropout) with random weights, scales and coefficients.
  It runs T = 10 Monte-Carlo passes, a point estimate, and 200 more passes,
  recomputes every logit, mean and variance with its own integer model, checks that the
  measured drop rate of each layer matches its probability, and counts each
  mechanism (multi-tile accumulation, saturation, kept and dropped scales,
  stalls for the mask bit, skip additions, point estimate, averaging,
  convolution positions, pooled writes), failing if one never occurs. It
  takes about two seconds.
* `tb_lenet5_workload` runs the LeNet-5 above at the default size with
  random parameters, T = 10 Monte-Carlo passes and a point estimate, checks
  every logit, mean and variance against its own model and the 18,355-cycle pass.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/sd_pkg.sv \
          tb/tb_scaledrop_cim_top.sv --top tb_scaledrop_cim_top
./obj_dir/Vtb_scaledrop_cim_top +verilator+rand+reset+2
```

The crossbar, ADC and Spin-ScaleDrop models use `real` values and delays and
are for simulation only; every other module is synthesizable.
