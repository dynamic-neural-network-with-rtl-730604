# A dynamic neural network with memristive compute-in-memory and a semantic CAM

Most neural networks spend the same amount of computation on every input,
whether it is easy or hard. This design implements the *early-exit* dynamic network
built on memristor crossbars. After each layer, the network turns its feature map
into a short ternary *search vector* and compares it with per-class *semantic centres*.
The centres are the averaged features of each class in the training set, stored in
a content-addressable memory (CAM). If the best cosine similarity is above that
layer's threshold, the network stops and returns the class. Otherwise it goes on
to the next layer. Easy inputs therefore leave after one or two layers, and only
hard ones pay for the whole network.

Both the network weights and the semantic centres are ternary (-1, 0, +1), and both
live in memristor crossbars:

* the **CIM** (compute-in-memory) crossbar multiplies the layer input by the weight
  matrix, using Ohm's law in each cell and Kirchhoff's current law on each column;
* the **CAM** crossbar applies the search vector to all centres of a layer at once.
  Each match-line current is the dot product with one centre.

A digital periphery does the rest: it activates and pools the digitised outputs,
takes the global average, quantises to ternary, picks the best class and makes the
exit decision. That periphery is this RTL. The analogue crossbar and its read-out
are behavioural models with the real parts' interfaces, so the whole system can be
simulated.

## How one inference runs

`dnn_top` processes one layer at a time. For layer *l*:

1. **Feature extraction (CIM).** Each position of the current feature map is a
   vector of up to `MAX_CH` unsigned 8-bit activation codes. It is applied to the
   layer's weight region in the CIM crossbar (`xbar_vmm`), which returns one signed
   sum per output channel.
2. **Activation and pooling (`act_pool`).** Each sum goes through a rectifier, an
   arithmetic right shift by the layer's `act_shift`, and saturation to 0..255.
   If the layer has `pool_en`, two successive positions are merged by an
   element-wise maximum. The results are written to the other half of a ping-pong
   feature buffer and become the next layer's input.
3. **Global average pooling (`gap_unit`).** The same activated outputs are summed
   per channel. At the end of the layer each sum is divided by the number of
   output positions.
4. **Ternary search vector (`ternary_quant`).** Let *min* and *max* be the smallest
   and largest of the `c_out` averages. Values below *min + (max-min)/3* become -1,
   values above *max - (max-min)/3* become +1, and the rest become 0.
5. **Semantic match (CAM).** The search vector is applied to this layer's rows of
   the CAM crossbar (a second `xbar_vmm`). Column *k* holds the centre of class
   *k*, so the engine returns all class dot products at once.
6. **Sort and exit test (`cam_sort`).** The class of highest cosine similarity
   wins. If its similarity reaches the layer threshold, the inference ends with
   `early_exit = 1`. The last configured layer always returns its best class.

`ops_count` counts the ternary multiply-accumulates actually executed. This is the
"computational budget" that early exit saves: Σ over run layers of
positions × `c_in` × `c_out`.

## Storing a trit in two memristors

Every ternary value uses two cells of the same row: one in the first half of the
columns and one in the second half.

| trit | first cell | second cell | `trit_e` code |
|------|------------|-------------|---------------|
| 0    | HRS        | HRS         | `2'b00`       |
| +1   | LRS        | HRS         | `2'b10`       |
| -1   | HRS        | LRS         | `2'b01`       |

For column pair *j*, the first-half column current minus the second-half column
current is (G_LRS − G_HRS) × Σ input × trit. The HRS leakage cancels. Trit *(r, j)*
sits in cells *(r, j)* and *(r, j + COLS/2)*. A programming write therefore
touches two cells over two clock cycles; `prog_ready` is low during the second one.

## The crossbar engine (`xbar_vmm`)

This block is the hardest part to follow, because it hides three facts about the
analogue front end.

**Only 64 word lines are driven at once.** The board generates 64 parallel
word-line voltages. An input longer than 64 entries is therefore applied in
groups of 64 rows: `row_base`, `row_base+64`, and so on. Each group's column
currents are digitised and added into signed 24-bit accumulators.

**Word-line voltages are unipolar (0–5 V).** The CIM input comes after the
rectifier, so it is never negative and one pass is enough. The CAM search vector
does hold -1 entries. In `signed_mode` the engine makes a second pass with the
magnitudes of the negative entries and subtracts it.

**Digitisation happens per group.** The two columns of each pair are converted
separately (14-bit ADC). They are subtracted digitally.

Per group and pass, an operation takes 1 drive cycle, 1 ADC-start cycle,
`CONV_CYCLES` conversion cycles and 1 accumulate cycle. The latency from `start`
to `done` is

    passes × ceil(n_in / 64) × (CONV_CYCLES + 3) + 2   cycles.

With the default conductances (G_LRS = 64 units, G_HRS = 0) and ADC gain (divide by
2^6), one ADC LSB is exactly one input-code × weight product. The VMM result is
then the exact integer dot product as long as a column does not saturate.
Saturation cannot occur with 8-bit codes: 64 × 255 × 64 / 64 = 16 320 < 16 383.
A different `G_HRS`, `G_LRS` or `ADC_SHIFT` gives the truncation and clipping
a real read-out would have.

## Cosine similarity without a square root

For ternary vectors the squared norm is the number of non-zero entries (`nnz`). So
cos(s, c_k) = d_k / sqrt(nnz_s · nnz_k), where d_k is the match-line dot product.
`cam_sort` scans the classes one per cycle and compares
d_a²·nnz_b with d_b²·nnz_a, handling the signs separately. A class whose stored
centre is all zero never wins. The exit test with a Q1.8 threshold T (256 = 1.0)
is

    d > 0  and  d² · 2^16 ≥ T² · nnz_s · nnz_k .

This is exact: nothing is rounded. The centre non-zero counts are written by the
host together with the centres (`norm_*` port). The search-vector count comes from
`ternary_quant`.

## Using the top level

All host actions are synchronous and are allowed only while `busy` is low.

* **Layer table.** Write one `layer_cfg_t` per layer (`cfg_we`, `cfg_layer`,
  `cfg_data`). Its fields are: `c_in` and `c_out` (≤ `MAX_CH`); `cim_row_base` and
  `cim_col_base` (first row and first column pair of the weights in the CIM
  crossbar); `cam_row_base` (first CAM row of this layer's centres: dimension *d*
  of class *k* is CAM row `cam_row_base + d`, column *k*); `pool_en`; `act_shift`;
  and `threshold` (Q1.8).
* **Weights and centres.** Write one trit per write with `prog_en`. `prog_sel` = 0
  selects the CIM: `prog_row` is the crossbar row and `prog_col` the column pair.
  `prog_sel` = 1 selects the CAM: `prog_row` is the row and `prog_col` the class.
  Wait for `prog_ready` between writes. Cells start in HRS, so only non-zero trits
  need writing into a fresh array.
* **Centre norms.** `norm_we` with layer, class and the number of non-zero trits of
  that centre.
* **Input.** `in_we` writes one position (`in_vec`, `MAX_CH` codes) into buffer 0.
* **Run.** Pulse `start` with `num_layers` and `num_pos`. When `done` pulses,
  `result_class`, `result_layers` (layers executed), `early_exit` and `ops_count`
  are valid and stay valid until the next run.

Per position, a layer costs about `ceil(c_in/64) × (CONV_CYCLES + 3) + 4` cycles.
The end of each layer adds `MAX_CH + 2` cycles for the GAP division, 2 for
quantisation, `2 × ceil(c_out/64) × (CONV_CYCLES + 3) + 2` for the CAM, and
`N_CLASS + 2` for the sort. At the defaults, a 784-position first layer with
9 input channels takes about 8 800 cycles.

### Parameters (`dnn_top`)

| parameter | default | origin |
|-----------|---------|--------|
| `MAX_LAYERS` | 11 | the ResNet in the experiment has 11 residual blocks |
| `MAX_POS` | 784 | a 28 × 28 image; design choice |
| `MAX_CH` | 128 | design choice |
| `N_CLASS` | 10 | ten digit classes / ten object categories |
| `XB_ROWS`, `XB_COLS` | 512, 512 | the 512 × 512 memristor array |
| `CAM_ROWS` | 512 | design choice (the CAM has 2 × `N_CLASS` columns) |
| `CONV_CYCLES` | 4 | ADC conversion time; design choice |
| `WRITE_NOISE_PCT` | 0 | programming spread of the cell model in percent; the measured devices show about 15 |

The package `dnn_pkg` fixes 64 parallel word lines (`PAR_ROWS`), the 14-bit ADC,
24-bit accumulators and the `layer_cfg_t` layout.

At the defaults, the CIM crossbar holds 131 072 ternary weights and the CAM holds
512 dimensions for each of 10 classes. That is more than the roughly 88 k weights
and 2 k centre values of the MNIST ResNet used in the experiment.

## What follows the source design and what is this implementation's own

These parts follow the published design: the early-exit flow; ternary weights and
centres stored as LRS/HRS memristor pairs; the 512 × 512 array; 64 parallel word
lines driven with 0–5 V; the 14-bit read-out; activation and pooling in a digital
core; global average pooling into a semantic vector per layer; the thirds rule
for ternary quantisation; choosing the centre of maximum cosine similarity; and a
separate threshold for each layer.

The following are choices made here, because the source does not specify them:

* **Layer shape.** Layers are pointwise. Every position is multiplied by the same
  matrix, as in PointNet's shared MLPs. 3 × 3 convolution windows, residual
  additions, and PointNet++ farthest-point sampling and grouping are **not**
  implemented. The MNIST ResNet therefore cannot run as it was run in the
  experiment. Its weights and centres fit, but its data flow does not.
* **Activation and pooling.** The rectifier and the shift-and-saturate
  requantisation are choices made here. So are the 2:1 max pooling over
  successive positions and the truncating GAP division. GAP is taken over the
  pooled map, the same map that is passed to the next layer.
* **Search-vector quantisation.** The thirds rule is applied in hardware to each
  query's averaged vector. The source states the rule for weights and stored
  centres, and draws the search vectors as ternary.
* **Final layer.** The last layer answers with its best CAM class. There is no
  separate classifier head.
* **Crossbars.** The CIM and CAM are two crossbar instances. The source partitions
  one physical array between them.
* **Read-out.** There is one ADC per column, all converting in parallel. The source
  board multiplexes a single converter.
* **Pair subtraction.** The subtraction of the pair columns, the 64-row group
  tiling and the two-pass signed input are all done digitally.
* **Formats and interface.** Q1.8 thresholds, host-written centre norms, and the
  configuration and programming interface are choices made here.
* **Noise.** The crossbar model can add write noise: each programming write
  lands on the nominal conductance times (1 + e), where e is roughly normal
  with a standard deviation of `WRITE_NOISE_PCT` percent. The default is 0,
  so that the digital periphery can be checked bit-exactly. Setting it to 15
  reproduces the spread measured on the source devices. Read noise, the
  fluctuation of a cell from one read to the next, is not modelled.
* **Inputs.** One figure of the source shows ternary (0, 1, -1) CIM inputs.
  Here, CIM inputs are 8-bit unsigned codes, because the word-line DAC range
  is unipolar.

The per-layer thresholds are found offline by a Tree-structured Parzen Estimator
search that trades accuracy against budget. They reach the hardware only as the
`threshold` field. The DAC, multiplexers, shift register and host SoC of the
source board are represented by the top-level ports.

## Files

`rtl/`

* `dnn_pkg.sv`: trit encoding, shared widths, `layer_cfg_t`.
* `memristor_crossbar.sv`: **behavioural model** of the 1T1R crossbar. It has
  programming and read ports and returns column currents.
* `tia_adc.sv`: **behavioural model** of the transimpedance amplifier and 14-bit
  ADC.
* `xbar_vmm.sv`: the ternary VMM engine, used for both CIM and CAM. It contains
  the two models above.
* `act_pool.sv`, `gap_unit.sv`, `ternary_quant.sv`, `cam_sort.sv`: the digital
  periphery.
* `dnn_top.sv`: the early-exit controller, the ping-pong feature buffers and the
  configuration tables.

Because of the two behavioural models, `xbar_vmm` and `dnn_top` simulate but do not
synthesise as they stand. For an implementation, replace the two models with the
real macro's interface. The other modules are synthesisable.

`tb/`: one self-checking testbench per module, named `tb_<module>.sv`. Each
compares against values computed independently in the testbench, checks the
latencies stated above, and prints `TB_RESULT checks=N failures=M`.

* `tb_dnn_top.sv` runs a reduced network: 4 layers, 16 positions, 80 channels,
  4 classes.
* `tb_dnn_top_full.sv` runs the top at its default parameters: 11 layers, a
  784-position input and up to 128 channels.
* `tb_dnn_pointnet.sv` also runs at the default parameters, with a
  point-cloud-shaped network: 8 layers, 3 input coordinates per point and
  784 points.

* `tb_dnn_noise.sv` runs the reduced network with a 15 % write noise in both
  crossbars.

Each builds a random ternary network and derives the class centres with a reference
model inside the testbench. They then run noisy queries and compare class, layers
run, exit flag and operation count for every query. With write noise the class
can differ from the ideal model, so `tb_dnn_noise` checks only that each run is
consistent. It reports how many classes still agree: between about 30 % and
70 %, depending on the random draw. This random, untrained network is much less
tolerant of noise than a network trained with ternary weights. They also fail unless early
exits, runs to the last layer, pooling, multi-group inputs and negative search
entries all occurred. The full-size test takes about 30 s to build and 7 s to run.

## Simulating

With Verilator 5:

    verilator --binary --timing --assert -Wno-fatal \
        rtl/dnn_pkg.sv rtl/*.sv tb/tb_dnn_top_full.sv --top-module tb_dnn_top_full
    ./obj_dir/Vtb_dnn_top_full

Any other testbench works the same way: list `rtl/dnn_pkg.sv` first, then the
`rtl/` files it uses (or all of them), then the testbench. Every testbench has a
cycle watchdog. The testbenches use `$urandom`, so runs with different seeds
(`+verilator+seed+N`) exercise different networks.
