# M2RU — a memristive recurrent-network accelerator that keeps learning

M2RU runs a small recurrent neural network, the *Minion Recurrent Unit*
(MiRU), and trains it on the chip while it works. New data arrive as a
non-stationary stream of examples. The network must learn each new task
without forgetting the old ones. Two ideas make this cheap enough for an
edge device:

* **Analog matrix products.** The weights live as conductances in
  memristor crossbars. Every vector–matrix product is a sum of bitline
  currents.
* **Replay without a large memory.** A reservoir sampler keeps a uniform
  random subset of everything seen so far. Those examples are compressed to
  4 bits by stochastic rounding, and the accelerator replays them between
  new examples. Training uses direct feedback alignment (DFA): a fixed
  random matrix carries the output error straight to the hidden layer, so
  no backward pass through time is needed. Gradient sparsification limits
  how often each memristor is written.

This repository gives SystemVerilog for the whole accelerator:

* the digital control, data preparation, activation, interpolation and
  training logic are synthesizable RTL;
* the crossbars, the integrating neuron ("logit") circuits and the shared
  ADC are cycle-level behavioural models of analog parts.

At its defaults the design is a 28×100×10 network over 28 time steps
(permuted MNIST read one image row per step), with a replay buffer of
1875 examples.

## 1. The recurrent unit

For input x^t (NX features), the hidden state h (NH units) evolves as

```
h~^t = tanh( W_h x^t + U_h (beta ⊙ h^{t-1}) )        candidate state
h^t  = lambda h^{t-1} + (1 - lambda) h~^t              interpolation
y    = W_o h^{NT}                                      readout, class = argmax
```

* beta ("reset coefficient") is one scalar shared by all units, and so is
  lambda ("update coefficient").
* W_h and U_h sit in one crossbar of NX+NH rows by NH columns:
  * rows 0..NX−1 carry x^t;
  * rows NX..NX+NH−1 carry beta·h^{t−1}.
* W_o is an NH×NY crossbar. A third, fixed NY×NH crossbar holds the random
  feedback matrix Psi.

### Number formats (this design's choices)

| quantity | format |
|---|---|
| input features x | unsigned 8 bit |
| h, h~, beta·h (`act_t`) | signed 10 bit, 8 fraction bits (1.0 = 256) |
| wordline operand (`sm_t`) | sign + 8-bit magnitude (saturates at 255/256) |
| conductance code | signed 8 bit, saturating; random init ±15 |
| ADC code | signed 8 bit = integrator value >>> shift, clipped |
| lambda, beta | 8-bit fraction (value/256), run-time registers |
| error E | signed 9 bit (±255) |
| write pulse | signed 4 bit (±7 pulses per write) |
| replay features | 4-bit, dequantized as q·16 |

## 2. One time step, cycle by cycle

A time step has four stages: weighted-bit streaming, integration and
conversion, activation and interpolation, and the next-step setup.

### Weighted-bit streaming (WBS)

No multi-bit DAC drives the wordlines. Each operand is held in
sign-magnitude form. Its magnitude bits are sent one per clock, MSB first
(`wbs_streamer`). A wordline is driven:

* +V when the current bit is 1 and the sign is positive;
* −V when the bit is 1 and the sign is negative;
* not at all when the bit is 0.

In silicon, level shifters make those voltages. The crossbar then sums,
per column, ±conductance over the driven rows (`memristive_crossbar`).

### Integration and conversion

The logit circuit of each column integrates that current. The bit sent
k places from the LSB is weighted 2^k (`logit_circuit`). In the analog
circuit, the weight comes from the ratio of an input memristor to a
feedback memristor that changes with the bit position. In the model it is
an exact shift. After NB = 8 bits the integrator holds the full dot
product.

The ADC is shared by all bitlines. The original design's ADC runs at 1.28 GS/s, so
at the 20 MHz system clock it can do many conversions per clock. The model
converts one unit of every tile per clock (`shared_adc`, PORTS = number of
tiles).

### Activation and interpolation

The hidden units are split into **tiles** of 16 (7 tiles for 100 units).
Each tile has:

* `activation_unit`: a shift ("weight scaling", `cfg_scale`) and a
  piecewise-linear tanh;
* `cand_fifo`: a FIFO for the candidates;
* `miru_tile`: a 16-entry shift register with one interpolation circuit.

For each unit in turn, the interpolation circuit pops a candidate and
computes

```
h_new = h~ + ((lambda * (h_prev - h~)) >>> 8)
```

This equals lambda·h_prev + (1−lambda)·h~ but needs one multiplier. The
register shifts as it goes, so after 16 pops it holds h^t in unit order.

### Next step

Each tile latches beta·h^t into its Rh register, which drives the
recurrent rows at the next step.

### Timeline

| cycles | what happens |
|---|---|
| 1 | read x^t from the auxiliary memory |
| 1 | load x^t and the Rh registers into the streamer; clear the integrators |
| 8 | stream the 8 bits; integrate |
| 16 | scan: the ADC converts unit u of every tile, u = 0..15 |
| 3 | drain the ADC → activation → FIFO → interpolation pipeline |
| 2 | latch beta·h^t; bookkeeping |

That is **31 clocks per step = NB + TILE + 7** (1.55 µs at 20 MHz); the
top-level tests measure it. The original design reports 1.85 µs per step (37 clocks)
without giving the breakdown. A 28-step inference takes 868 clocks.

## 3. Readout and training

### Readout

* h^{NT} is streamed (WBS again) into the NH×NY readout crossbar.
* Its NY integrators are converted in one clock.
* A winner-take-all picks the class. It is `kwta` with K=1, ranking by
  signed value.

### Error

`error_unit` forms E_j = 255·[j is the winner] − 255·[j is the label],
which is ŷ − y with a one-hot ŷ. It also flags `correct`.

### Output-layer update

`dfa_trainer` writes one readout column per clock. The pulse for row i of
column j is −sign(h_i·E_j)·min(7, |h_i·E_j| >> lr_shift). Only h^{NT} is
used.

### Error projection

E is streamed through the fixed Psi crossbar. The NH projected values
e = Psi·E are converted by the shared ADC and held in the trainer. This
corresponds to the "delta-h" buffer of the original design.

### Hidden-layer update (recompute pass)

The sequence is recomputed from the auxiliary memory. At each step, after
the scan:

1. Compute delta_j = (lambda · e_j · g'_j) >>> 16, where g' = 1 − h~²
   (`tanh_deriv`) of that step's candidate.
2. **Sparsify.** `kwta` keeps the K_GRAD = 43 deltas of largest magnitude.
   This matches the ~43 % sparsification ratio of the original design.
3. Write each kept column of the hidden crossbar:
   * rows 0..NX−1 get pulses from x_i·delta_j;
   * rows NX.. get pulses from (beta·h^{t−1})_i·delta_j.

   Dropped columns are skipped and counted in `cols_skipped`.

Updates are applied step by step, not accumulated over the sequence. This
removes any gradient storage.

### Timing of a TRAIN command

| phase | clocks |
|---|---|
| load NT beats | NT |
| forward | NT · 31 |
| readout | ≈ 8 + NY + 3 |
| output update | NY |
| projection | ≈ 8 + 16 + 3 |
| recompute | NT · (31 + (NH+1) + NH + 2) |

## 4. Data preparation and replay

### Reservoir sampler

The sampler (`reservoir_sampler`) uses a 32-bit xorshift generator, a
counter CNT of examples seen, a modulus unit and an index check:

* The first K examples fill slots 0..K−1.
* For a later example, j = XR mod CNT. The example replaces slot j if
  j < K and is dropped otherwise.
* Each example therefore ends up in the buffer with probability K/CNT.
* The decision is ready one clock after the example is announced, before
  its first input beat.

### Stochastic quantizer

The quantizer (`stochastic_quantizer`) turns each 8-bit feature
x = 16·a + f into a 4-bit value:

* a + 1 when a 4-bit LFSR value r satisfies r < f (and a < 15);
* a otherwise.

The expected value is therefore x/16. There is one LFSR per lane, and a
whole 28-feature row is done per clock. Rows of a kept example go to
`replay_buffer` (K × NT rows of NX×4 bits, plus the label) as they stream
in.

### Replay

A REPLAY command names a slot. Its rows are read back, dequantized (q·16)
and written to the auxiliary memory. The command then trains exactly like
TRAIN, using the stored label. When to replay is the host's choice.

## 5. Host interface (`m2ru_top`)

### Configuration

`cfg_lambda`, `cfg_beta`, `cfg_scale` and `cfg_lr_shift` are static
configuration inputs.

### Commands

Commands use a `cmd_valid`/`cmd_ready` handshake. The command carries:

* `cmd` = `CMD_INFER`, `CMD_TRAIN` or `CMD_REPLAY`;
* `cmd_label`, for TRAIN;
* `cmd_slot`, for REPLAY.

INFER and TRAIN then take NT input beats: `in_x` (NX bytes), handshaked by
`in_valid`/`in_ready`.

### Results

At the end of a command:

* `done` pulses for one clock;
* `pred` holds the class;
* `correct` holds whether it matched the label (TRAIN/REPLAY).

### Status outputs

| output | meaning |
|---|---|
| `sample_stored`, `sample_slot` | the sampler's decision |
| `replay_filled` | valid replay-buffer entries |
| `examples_seen` | examples counted so far |
| `cols_skipped` | hidden columns skipped by sparsification |
| `adc_clipped` | an ADC code saturated this clock |

## 6. What is modelled, and how far to trust it

### Behavioural models

* **`memristive_crossbar`.** The conductance of each cell pair (tunable
  minus reference memristor) is an 8-bit signed code. A write adds the
  signed pulse count, saturating. There is no device non-linearity,
  variability or endurance model. The column current is an exact integer
  sum.
* **`logit_circuit`.** An ideal integrator with exact binary weighting.
* **`shared_adc`.** Ideal truncation with clipping.

  Full-scale shifts:

  | crossbar | shift |
  |---|---|
  | hidden | 10 |
  | readout | 10 |
  | projection | 6 |

  The projection shift is smaller because its input E has only two
  non-zero entries. These full scales are this design's own.

### Not built

* **Level shifters** (analog drivers of the wordline voltages). The
  streamer's `drv_pos`/`drv_neg` outputs are their inputs.
* **Conductance programming circuit** (the Ziksa pulse scheme). Its effect
  is the crossbar's write port.

### Departures and readings of the source description

* **Interpolation formula.** One passage describes the interpolation with
  lambda and 1−lambda swapped. The update equation is followed:
  h^t = lambda·h^{t−1} + (1−lambda)·h~^t. A training-algorithm listing uses
  h~^{t−1} in this formula, which is read as a typo.
* **Readout order.** The readout winner-take-all is digital and comes
  after the ADC. The original places an analog voltage-mode k-WTA between
  the integrators and the ADC, approximating softmax. Only the winner is
  used for the error, so the result is the same as long as the ADC keeps
  the order of the integrator voltages. Two columns that clip to the same
  code tie, and the lower index wins.
* **Projected-error storage.** The projected error is held in a register
  array read in parallel, not in a FIFO.
* **tanh segments.** The piecewise-linear tanh is not specified. This one
  has slopes 1, 1/2, 1/4, 1/8, 1/16 on |x| < 0.5, 1, 1.5, 2, 2.5 and
  saturates at 255/256. Its maximum error is about 0.04.
* **Derivative.** The tanh derivative is 1 − h~².
* **Hidden delta.** It uses lambda as the scale on the error. This follows
  the DFA listing.
* **Update timing and sparsification.** Weight updates are applied per
  step during a recompute pass. K_GRAD is a fixed count of 43 columns
  rather than a ratio.
* **Design-specific choices.** The following are all this design's:
  * the learning-rate shift;
  * the pulse saturation at ±7;
  * the conductance initialisation (a hash-based pseudo-random ±15);
  * the full-scale shifts;
  * the command/beat protocol;
  * the replay schedule;
  * q·16 dequantization;
  * the 10-bit activation format.
* **Buffer capacity.** The buffer holds K_REPLAY = 1875 examples in total.
  That is the per-task figure for permuted MNIST; for T tasks set
  K_REPLAY = T·1875.
* **Latency.** The design takes 31 clocks per step (1.55 µs), against the
  reported 1.85 µs. The reported ~19,300 sequences/s corresponds to
  28 × 1.85 µs per sequence. This design's inference alone is 43.4 µs
  (~23,000 sequences/s at 20 MHz).

### Sizes

The defaults hold:

* the 28×100×10 MNIST configuration.

They do not hold:

* **256-hidden-unit variants.** Set `NH_P=256`.
* **split CIFAR-10 on ResNet-18 features.** These are 512 features per
  example. The order in which they are fed as time steps is not defined
  here. Feed them as, for example, 19 steps of 28 features, padded with
  zeros.

## 7. Files

Package and data preparation:

| file | contents |
|---|---|
| `rtl/m2ru_pkg.sv` | sizes, number formats, command enum, control-word and status structs, format conversion functions |
| `rtl/xorshift32.sv`, `rtl/lfsr4.sv` | random sources |
| `rtl/reservoir_sampler.sv`, `rtl/stochastic_quantizer.sv`, `rtl/replay_buffer.sv`, `rtl/aux_memory.sv` | data preparation |

Analog parts (behavioural models):

| file | contents |
|---|---|
| `rtl/wbs_streamer.sv` | wordline buffers and bit-serial streaming |
| `rtl/memristive_crossbar.sv`, `rtl/logit_circuit.sv`, `rtl/shared_adc.sv` | analog parts (behavioural) |

Hidden layer:

| file | contents |
|---|---|
| `rtl/activation_unit.sv`, `rtl/cand_fifo.sv`, `rtl/miru_tile.sv` | per-tile activation, FIFO, interpolation |

Readout and training:

| file | contents |
|---|---|
| `rtl/kwta.sv` | serial k-winner-take-all (readout and sparsification) |
| `rtl/error_unit.sv`, `rtl/tanh_deriv.sv`, `rtl/dfa_trainer.sv` | training datapath |

Control and top level:

| file | contents |
|---|---|
| `rtl/control_unit.sv` | command and step sequencer |
| `rtl/m2ru_top.sv` | the accelerator |

Each `tb/tb_<module>.sv` checks its module against values computed
independently in the testbench. Each prints
`TB_RESULT checks=N failures=M`.

### Top-level tests

* **`tb_m2ru_top`** is a reduced-size end-to-end test: 4 inputs,
  20 hidden units in 2 tiles, 3 classes, 4 steps, a 3-slot buffer.
  * It compares every prediction and every hidden state with an
    independent bit-exact reference model of the forward pass.
  * It checks replay-buffer contents against the rounding bounds.
  * It checks the 31-clock step.
  * It checks the direction of learning. After every TRAIN that predicted
    wrongly, the reference model is re-run with the updated conductances.
    The label's readout value must have gained on the wrong winner's in
    most such cases; in the default run it gains in all 10.
  * It requires each mechanism to occur at least once: buffer fill,
    replace, drop; stochastic round-up; replay; inference; writes to both
    trained crossbars; sparsified columns; ADC clipping.
* **`tb_m2ru_full`** does the same at the default sizes: 6 examples and one
  replay.

### Simulating with Verilator

```
verilator --binary --timing --assert -Irtl --top-module tb_m2ru_full \
    rtl/m2ru_pkg.sv tb/tb_m2ru_full.sv -y rtl -y tb
./obj_dir/Vtb_m2ru_full
```

Use another testbench name for the other tests. All parameters of
`m2ru_top` (NX_P, NH_P, NY_P, NT_P, K_REPLAY, K_GRAD, the three ADC shifts)
can be overridden.

### Synthesis

The crossbar model has a nested loop over all rows and columns. Some
synthesis front ends refuse to unroll it at full size. It stands for an
analog array, so synthesising it is not meaningful anyway.
