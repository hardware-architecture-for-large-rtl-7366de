# Random-feature ELM image classifier: analog feature array with a digital back end

An Extreme Learning Machine (ELM) is a two-layer network whose first layer is
random and never trained: the input vector X (D values) is multiplied by a
fixed random matrix W (D x L), each of the L sums goes through a simple
nonlinearity g, and only the second layer, a linear map from the L hidden
values to C class scores, is trained (in closed form, off line). The random
first layer is the expensive part, and it is the part that analog silicon can
do almost for free: a grid of current mirrors built from minimum-size
transistors has random gains because of threshold-voltage mismatch, so each
mirror is a multiplier whose weight is stored in the transistor itself, and
wires add the currents.

This RTL describes such a system as published for MNIST digit recognition:

* a **feature chip** (D-ELM) with 128 input channels, a 128 x 128 random
  current-mirror array and 128 oscillator-plus-counter neurons, and
* an **FPGA-side back end** that drives the chip, multiplies the number of
  random features by re-running the chip on rotated inputs, applies the
  nonlinearity, mutes neurons that carry no information ("cognizance check")
  and computes the output layer with 6-bit weights.

The digital parts are synthesizable SystemVerilog. The analog parts of the
chip (DACs, mirror array, oscillators) are behavioural models, so the whole
system can be simulated end to end.

## Data flow

```
            host: image (126 pixels), weights, configuration
                 |
   +-------------v--------------+        chip pins (single clock domain)
   | timing_control             |  rn_in, clk_in, data_in, a[6:0]
   |  image buffer, rerun loop, |------------------------------------+
   |  input rotation            |  rn_cnt, neu_en, clk_out           |
   +-------------^--------------+                                    |
                 | c[13:0]                                           v
                 |               +------------------------------------------------+
                 |               | delm_ic                                        |
                 |               |  input_deserializer (128 input registers)      |
                 |               |   -> cma_model (128 DACs, 128 x 128 mirrors)   |
                 +---------------|   -> 128 x cco_model -> 128 x neuron_counter   |
                                 |   -> column_scanner -> c[13:0]                 |
                                 +------------------------------------------------+
   hidden counts h_j, j = r*128 + n
                 |
   +-------------v--------------+
   | nonlinearity               |  y = h - h_offset; RLSU or tristate
   +------+--------------+------+
          | train_mode=1 | train_mode=0
   +------v---------+  +-v--------------------------+
   | cognizance_    |  | elm_second_stage           |
   | checker        |->|  cognizance vector, packed |-> class_id, scores
   +----------------+  |  weights, 10 accumulators  |
       vector writes   +----------------------------+
```

`elm_rfe_system` is the top. `elm_pkg` holds the shared widths and the two
stream records: `hid_t` (raw count, index, last flag) and `act_t` (activation
magnitude, sign, saturation level, index, last flag).

## Getting more features than neurons: rerun with a rotated input

The chip has N = 128 physical neurons, but good MNIST accuracy needs thousands
of hidden neurons. Instead of more silicon, the chip is run E times per image.
On rerun r the controller sends pixel X[(k - r) mod D] to input channel k.
Neuron n then computes

    h(r, n) = sum_k w[k][n] * X[(k - r) mod D] = sum_i w[(i + r) mod D][n] * X[i]

which is the same neuron with its weight column rotated by r rows. The weight
matrix seen on rerun r is the original with its rows circularly shifted, so E
reruns give L = E * N different random projections from the same D x N
weights, with no switches on the chip. Virtual hidden neuron j = r*N + n. With
E up to 100 the design supports L up to 12800.

Only the D = 126 image pixels rotate. MNIST's 28 x 28 images are reduced by
2 x 3 averaging to 14 x 9 = 126 values before they reach this hardware (that
reduction is done by the host); input channels 126 and 127 are held at zero.

One rerun (`timing_control`) is:

| phase  | cycles          | pins                                                  |
|--------|-----------------|-------------------------------------------------------|
| LOAD   | D * XW = 1008   | clk_in high, data_in = pixel bit (MSB first), a = channel |
| RSTC   | 1               | rn_cnt low: counters and scanner cleared              |
| CONV   | conv_cycles     | neu_en high: oscillators run, counters count          |
| SETTLE | 2               | last spikes reach the counters                        |
| SCAN   | N = 128         | clk_out high; c is sampled each cycle as h(r, n)      |

plus one cycle of rn_in at the start of the image, so an image takes
`2 + E * (D*XW + 1 + conv_cycles + 2 + N)` cycles from the edge that takes
`start` to the edge that raises `done`. The hidden-count stream leaves the
controller one word per SCAN cycle, one cycle behind `clk_out`.

## The chip model (`delm_ic`)

Pins are the ones in the published block diagram: `data_in`, `a[6:0]`,
`clk_in`, `rn_in` on the input side; `rn_cnt`, `neu_en`, `clk_out` and the
14-bit bus `c[13:0]` on the neuron side. Here everything runs on one system
clock `clk`; `clk_in` and `clk_out` are strobes in that clock domain, and the
reset pins are active low.

* `input_deserializer` (logic): bit counter and shift register; the XW-th
  bit of a word writes it into register `a`.
* `cma_model` (behavioural): the input generation circuits (one DAC per
  row) and the mirror array. Each DAC is ideal: row current = x * 4 in
  integer units. w[i][j] = exp(g), g ~ Normal(0, 0.6), the
  published model of sub-threshold mismatch in this 0.35 um process. The
  weights are drawn once at time zero from a fixed seed (hash of seed, row and
  column plus a Box-Muller transform) and kept with 8 fraction bits, so every
  run simulates the same "chip". Column current = sum_i w[i][j] * row current,
  exact integer arithmetic.
* `cco_model` (behavioural): phase accumulator; adds gain_j * i_z every cycle
  and fires when it passes 2^32. At most one spike per cycle, which stands
  for the oscillator's upper frequency limit. Each neuron has its own
  log-normal gain (spread 0.3), which models the oscillator mismatch. That
  mismatch is what makes some neurons fire high or low for every input, the
  neurons the cognizance check removes.
* `neuron_counter` (logic): 14-bit spike counter, saturating, cleared by
  `rn_cnt`.
* `column_scanner` (logic): index register; `clk_out` steps it, `rn_cnt`
  restarts it at column 0, and `c` shows the selected counter.

So the expected count of neuron n is about
`conv_cycles * (sum_i w[i][n] * 4 * x_i) * gain_n / 2^32`, capped at
`conv_cycles`. With an 8-bit image, about half its pixels dark, and a
300-cycle window, counts are a few hundred. The published chip resolves 12
bits.

## Activation (`nonlinearity`)

Counts are never negative, so they are first centred: y = h - h_offset. The
published system makes its random features zero-mean by "pairwise
subtractions" whose pairing is defined in an earlier work. This design uses
a single programmable reference instead, which is also one subtraction per
neuron. Then:

* **RLSU** (rectified linear, saturating): 0 for y <= 0, y for 0 < y < th,
  th for y >= th. It is quantised to 8 bits as min(g >> q_shift, 255).
* **tristate**: +1 for y >= th, -1 for y <= -th, 0 otherwise. The output
  layer then only adds or subtracts weights. (The published equation prints
  the limits inconsistently; the symmetric reading is used.)

The block also reports the saturation level hit: RLSU 0 or th, or tristate
-1, 0 or +1.

## Cognizance check (`cognizance_checker`)

A neuron that gives the same saturated output for nearly every training
sample tells the output layer nothing. Over a training set, the checker keeps
three counters per virtual neuron: low level (RLSU 0 / tristate -1),
tristate 0, and high level (RLSU th / tristate +1). It also counts the samples
S. When finalized, neuron j is **muted** if any of its counters satisfies
`count * 1000 > theta_permille * S`. The published setting is 99.5 %
(`theta_permille = 995`). With ten roughly balanced classes, a neuron that
separates one class from the other nine already shows one level for about
90 % of the samples, so theta must be well above 90 %.

The result is an L-bit cognizance vector. The checker streams it, one bit per
cycle, straight into the output layer's vector memory. Clearing and
finalizing each take `num_hidden` cycles. Counters are 16 bits and saturate.
The published measurements kept about 80 % (RLSU) and 70 % (tristate) of the
neurons.

## Output layer (`elm_second_stage`)

Weights are 6 bits, sign and magnitude (bit 5 is the sign). Only muted
neurons lack weights, so the weight memory is **compacted**: row m holds the
10 class weights of the m-th cognizant neuron in index order. For each
activation the cognizance bit is looked up. If it is 0, nothing is fetched or
added. If it is 1, the next row is read and all 10 accumulators (32-bit) are
updated: `+= beta * H` for RLSU, `+= beta`, `-= beta` or nothing for
tristate. Memory size, reads and additions therefore scale with the number
of cognizant neurons M, not L. `start` clears the accumulators and the row
pointer. The word flagged `last` ends the image, and two edges after it is
taken `class_valid` rises with `class_id` (largest score; ties go to the
lower index), `scores` and `fetches` (the rows read).

The weights themselves come from off-line ELM training (regularised least
squares on the hidden outputs of the cognizant neurons). They are written
through `beta_we/beta_addr/beta_data`.

## Using the top

1. Configure `nl_mode`, `th`, `h_offset`, `q_shift`, `num_reruns` (1..100),
   `conv_cycles` and `theta_permille`.
2. Training of the cognizance vector: `train_mode = 1`, pulse `cog_clear` and
   wait for `cog_busy` to fall. For each training image, write its 126 pixels
   (`img_we/img_addr/img_data`), pulse `start` and wait for `done`. Then pulse
   `cog_finalize` and wait for `cog_busy` to fall.
3. Write the compacted weight rows.
4. Inference: `train_mode = 0`; per image write the pixels, pulse `start`,
   and read `class_id` and `scores` when `class_valid` pulses.

## Parameters

| parameter | default | meaning | origin |
|-----------|---------|---------|--------|
| D | 126 | image pixels (14 x 9) | published |
| D_CH | 128 | chip input channels / registers | published |
| N | 128 | physical neurons (mirror columns) | published |
| E_MAX | 100 | largest number of reruns | published (100 reruns) |
| L_MAX | 12800 | virtual neurons = E_MAX * N | published |
| CW | 14 | counter and scan bus width | published bus C<13:0> |
| HB | 8 | RLSU activation width | published |
| C | 10 | classes | published |
| BB | 6 | output weight width, sign-magnitude | published |
| accumulator | 32 bits | class scores | published |
| XW | 8 | input word width | own choice |
| SIGMA | 0.6 | spread of ln(w) in the mirror array | published model |
| GSIGMA | 0.3 | spread of ln(gain) of the oscillators | own choice |
| I_UNIT, PHASE_FULL, WFRAC | 4, 2^32, 8 | analog model scaling | own choice |

## Where this departs from, or goes beyond, the published design

The published description gives the block structure, the sizes and pin
names, the rotation scheme, the two activations, the cognizance rule and the
output-layer arithmetic. These are this design's own:

* single system clock; `clk_in`/`clk_out` as strobes; active-low resets;
  serial framing (MSB first, the XW-th bit commits the word); input width 8;
* the order and length of the controller's phases, the settle gap, and scan
  order and restart;
* the counter saturating instead of wrapping;
* centring by one programmable offset instead of the unspecified pairwise
  subtraction;
* RLSU quantisation by a right shift;
* the mode switch that sends one hidden stream either to the checker or to
  the output layer, and the direct checker-to-output-layer vector path;
* weight-memory depth equal to L_MAX, so any M fits;
* all analog modelling (linear DAC, noise-free mirrors, phase-accumulator
  oscillator with a one-spike-per-cycle limit, gain mismatch 0.3).
  Noise in the real mirrors and oscillator jitter are not modelled.

Not included: the bias reference circuit (analog, no logic function), the
test board, the exact zero-mean pairing, the MNIST data, and the off-line
training of the output weights. The published plan for several mirror banks
per neuron column is a future extension and is not built.

## Fit of the published workloads

* MNIST at 126 pixels with L = 128 ... 12800 (E = 1 ... 100): fits. 126 <= 128
  channels, E <= 100, M <= 10314 weight rows against 12800, and 10 classes.
* The published energy example (L = 6400, M = 4749 tristate neurons, 4749 x 10
  additions per image) fits.
* MNIST at the original 784 pixels does not fit the 128-channel chip, which is
  why the images are averaged down.

## Verification

Every module has a self-checking testbench in `tb/` that ends by printing
`TB_RESULT checks=<n> failures=<n>` and has a watchdog:

| testbench | what it checks |
|-----------|----------------|
| tb_input_deserializer | random words to random addresses, with gaps; commit timing; reset |
| tb_cma_model | DAC-plus-array readout per row, log-normal statistics of the weights (mean of ln w about 0, sd about 0.6), unit-row readout, superposition |
| tb_cco_model | spike count against T * i_z * gain / 2^32 over 12 currents; saturation; enable |
| tb_neuron_counter | random spike trains, saturation, reset |
| tb_column_scanner | stepping, holding, wrap, restart |
| tb_timing_control | rotation of every channel on every rerun, pin phases, hidden-stream indices, cycle count |
| tb_nonlinearity | both activations against a reference, including the edges y = 0, +-th |
| tb_cognizance_checker | neurons just above / below the 99.5 % limit, sample count, clear, finalize timing |
| tb_elm_second_stage | scores, class, fetch count and latency in both modes, ties |
| tb_delm_ic | every neuron count of the full chip against the prediction from its own weights and gains |
| tb_elm_rfe_system | end to end, 3 reruns (L = 384): counts per rotation, cognizance vector, scores and classes in both modes, cycle count; each mechanism (rerun, RLSU regions, tristate levels, muting, skipped fetches, mode switch) must occur |
| tb_elm_rfe_system_full | the same at L = 12800 (100 reruns), all parameters at their defaults |

The end-to-end tests use random sparse images and random weights. They show
that the hardware computes the intended function exactly. They do not
measure recognition accuracy.

To run one with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -y rtl +libext+.sv -Irtl \
    rtl/elm_pkg.sv tb/tb_elm_rfe_system.sv --top-module tb_elm_rfe_system
./obj_dir/Vtb_elm_rfe_system
```

The full-size run takes about 15 s. The analog models use real arithmetic
(`$exp`, `$ln`) only in their `initial` blocks, and they are not meant for
synthesis. To build a silicon-free variant, replace `delm_ic` with the real
chip's pins.
