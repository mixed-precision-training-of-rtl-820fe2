# Mixed-precision neural-network training with computational memory

Resistive memory devices in a crossbar can store a layer's weights as
conductances and compute a matrix-vector product in one step, because each
line's current sums the conductance-times-voltage products. A crossbar is
therefore a good engine for the forward and backward passes of
backpropagation. The weak point is the weight update. A real device can only
change its conductance in coarse steps, and the steps are noisy, asymmetric
and depend on the device's state. Writing each tiny gradient into the array
does not work.

The mixed-precision scheme keeps the crossbar for the two products and puts a
small amount of exact digital arithmetic beside it:

* every synapse has a high-precision accumulator `chi` in ordinary volatile
  memory, and each training step adds its weight update `dW` to it;
* when `|chi|` reaches the device granularity `eps`, the device gets
  `p = trunc(chi / eps)` programming pulses and `p * eps` is subtracted from
  `chi`;
* the device is programmed blind: it is never read back or verified.

Small updates thus pile up until they are worth one device step, and most
devices are not touched at all for most images. This RTL implements that
architecture for the two-layer MNIST classifier it was evaluated on
(784 inputs, 250 hidden sigmoid neurons, 10 sigmoid outputs, and a bias input
of 1 in the input and hidden layers). The crossbars and converters are
behavioural models. Everything digital is synthesizable.

## Data flow for one training image

`mp_trainer` holds two crossbars: `u_xbar1` is 785 x 250 and `u_xbar2` is
251 x 10. Each crossbar has its own `chi_accumulator` and
`programming_circuit`. One sigmoid unit, one error unit and one weight-update
multiplier are shared. A sequencer steps through these states:

| state | what happens | cycles |
|-------|--------------|--------|
| FWD1  | array 1 drives bit line j for every hidden neuron: `z_j = sum_i W_ji x_i`, then `x_j = f(z_j)` and `f'_j` | NH + 1 |
| FWD2  | array 2, the same for the outputs | NO + 1 |
| ERR   | `delta_k = (t_k - x_k) f'_k` for a one-hot target, normalised to the DAC | 1 |
| BWD   | errors drive the bit lines of array 2; word line j gives `sum_k W_kj delta_k`, and `delta_j` is that sum times `f'_j` | NH + 1 |
| UPD2  | for each of the 2,510 layer-2 synapses: `dW = eta delta_k x_j`, accumulated in chi, pulses if due | 2 per synapse + stalls |
| UPD1  | the same for the 196,250 layer-1 synapses | 2 per synapse + stalls |
| DRAIN | wait until the last pulses have been delivered | |

In inference mode (`train = 0`) the run stops after ERR. The prediction is
the output with the largest activation. Inference takes `NH + NO + 4` cycles
from `start` to `done`. A training image at full size takes about 398,000
cycles, almost all of them in UPD1. A production design would run several
accumulator lanes in parallel. Here the accumulator takes one synapse every
two cycles, because its memory is a single-port array.

The backward product uses the layer-2 weights from before this image's
update, as backpropagation requires. Layer 1's errors are not driven into an
array, because no layer lies below it. Its crossbar is therefore built
without the transposed read-out (`BACKWARD = 0`).

## The update path (chi, p, pulses)

This is the heart of the scheme and the part to understand first.

`weight_update_unit` forms the exact product `eta * delta * x`. It then
shifts the product right into the accumulator format, Q8.16 in 24 bits, and
saturates it. The shift is `UPD2_SHIFT + s` for layer 2 and
`UPD1_SHIFT + s` for layer 1. Here `s` is the error normalisation exponent of
the image (see below), so the normalisation factor is folded into the
learning rate.

`chi_accumulator` reads `chi` in the cycle it accepts an update. In the next
cycle it adds `dW` (saturating), quantises and writes back. The quantiser,
`pulse_quantizer`, divides `|chi|` by `eps_p` (for `chi >= 0`) or `eps_d`
(for `chi < 0`) and truncates toward zero. It saturates `|p|` at 15 and
returns `chi - p * eps`. With two granularities an asymmetric device can be
served: one that steps up in finer steps than it steps down, or the reverse.
If `p != 0`, a request `(address, p)` is held until the programming circuit
is free. No new update is accepted meanwhile. This is the stall counted in
`n_stalls`. After reset, or on `clear_chi`, the accumulator memory is swept
to zero, one word per cycle, and the trainer reports `busy` until the sweep
ends (196,250 cycles at full size).

`programming_circuit` turns a request into `|p|` identical pulses on the
device's address. Each pulse is one cycle high and one cycle low. Polarity
comes from the sign of `p`. In the crossbar model, every rising edge of
`pulse` moves the device by one step, clipped to [-1, 1]. The step depends on
the device options below; by default it is `+EPS_P` or `-EPS_D`.

The digital granularities (`eps_p`, `eps_d` inputs, chi format) and the
device steps (`DEV_EPS_P`, `DEV_EPS_D` parameters, Q2.14) are set
separately. Normally they describe the same device: an n-bit device spans
[-1, 1] in `2^n - 2` steps, so `eps = 2 / (2^n - 2)`. `mp_pkg::eps_chi(n)`
and `mp_pkg::eps_g(n)` compute it in the two formats. The default is n = 4,
which the evaluation found the best trade-off between accuracy and number of
programming events. Setting the two apart models a device whose real step
differs from the one the controller assumes.

## Number formats and converter ranges

All values are two's-complement fixed point. The formats are set in
`mp_pkg`. The 8-bit converters follow the evaluation, which found 8 bits
enough for both DACs and ADCs. The other widths are this design's own
choices.

| quantity | format |
|----------|--------|
| activation `x` (word-line DAC code) | unsigned Q0.8; biases are 255 |
| output error on the bit lines (DAC code) | signed Q1.7, times 2^s |
| conductance `W` | signed Q2.14, limited to [-1, 1] |
| forward ADC code, the sigmoid input | signed Q4.4 (range +-8) |
| backward ADC code | signed Q3.5 (range +-4) |
| `f'(z) = x (1 - x)` | unsigned Q0.8 |
| hidden-layer error | signed 16 bits, 13 fraction bits, times 2^s |
| `chi`, `dW` | signed Q8.16, 24 bits |
| learning rate `eta` | unsigned Q0.12, 8 bits (0 to 0.062) |

Error normalisation: the raw output errors have 16 fraction bits.
`error_unit` picks the largest `s` in [0, 9] for which every error shifted
right by `9 - s` fits the signed 8-bit DAC. So a DAC code stands for
`delta * 2^s`. The same factor carries through the transposed product into
the hidden errors. The weight-update shift removes it by adding `s`.

ADC ranges are fixed. Forward sums are read as Q4.4, the range in which the
sigmoid is not saturated. Backward sums are read as Q3.5. Clipped
conversions are counted in `n_adc_sat`. The original evaluation chose ADC
ranges from the observed distribution of the sums. To change the ranges,
edit `ADC_FWD_FRAC` and `ADC_BWD_FRAC`.

The sigmoid is the PLAN piecewise-linear approximation (segments at
|z| = 1, 2.375 and 5; slopes 1/4, 1/8, 1/32). It is truncated to Q0.8 and
lies within about 0.02 of the logistic function. The evaluation used the
exact sigmoid.

## Files

| file | role |
|------|------|
| `rtl/mp_pkg.sv` | formats, sizes, shifts, `eps_chi` / `eps_g` |
| `rtl/mp_trainer.sv` | top: buffers, sequencer, wiring |
| `rtl/chi_accumulator.sv` | chi memory, add, quantise, write back, request |
| `rtl/pulse_quantizer.sv` | `p = trunc(chi/eps)`, residual, asymmetric eps |
| `rtl/programming_circuit.sv` | pulse train for one request |
| `rtl/weight_update_unit.sv` | `eta * delta * x` into chi format |
| `rtl/error_unit.sv` | output errors and normalisation |
| `rtl/sigmoid_unit.sv` | activation and derivative |
| `rtl/crossbar_array.sv` | behavioural crossbar (both products, device update, device options) |
| `rtl/adc_model.sv` | behavioural 8-bit ADC |
| `tb/tb_<module>.sv` | self-checking testbench per module |
| `tb/tb_mp_trainer_full.sv` | full-size 784-250-10 run, default parameters |
| `tb/tb_mp_trainer_devices.sv` | training with non-linear, stochastic and noisy devices |

### Top-level interface

The host does the following:

1. After reset, wait for `busy` to fall.
2. Write the initial conductances through `init_we`, `init_layer` (0 = layer
   1, 1 = layer 2), `init_addr` and `init_val`. The synapse address is
   `post * (pre_count + 1) + pre`.
3. For each image, write the 784 pixel codes with `pix_we`, `pix_addr` and
   `pix_data`. Set `label`, `train`, `eta`, `eps_p` and `eps_d`.
4. Pulse `start` while `busy` is low, then wait for the one-cycle `done`.
   `pred`, `out_x` and `norm_s` then hold the results.

`n_dev_updates`, `n_pulses`, `n_stalls`, `n_pulse_sat` and `n_adc_sat` count
programming events, pulses, stall cycles, saturated pulse counts and clipped
conversions since reset.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog ends a run that hangs. For example:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/mp_pkg.sv \
    tb/tb_mp_trainer.sv --top-module tb_mp_trainer
./obj_dir/Vtb_mp_trainer
```

`tb_mp_trainer` trains a 12-6-4 network on 24 images and runs a
bit-accurate reference model of the whole step beside it: converters,
sigmoid, normalisation, chi and device response. After each image it
compares outputs, prediction, normalisation exponent and event counts. It
also requires every mechanism to occur at least once: device updates in both
directions, a stall, a saturated pulse count, ADC clipping, a change of the
normalisation exponent, inference mode and device clipping.
`tb_mp_trainer_full` does the same at 784-250-10 with default parameters. It
trains 24 times on one fixed image, so the accumulated updates reach the
device step, then classifies that image. It runs in about a minute.

## Device options

`crossbar_array` has four parameters for device non-idealities. `mp_trainer`
passes `DEV_BETA`, `DEV_STEPS`, `DEV_PROG_SIGMA` and `DEV_READ_SIGMA` to
both of its arrays. All are off by default, which gives the linear device.

| parameter | effect |
|-----------|--------|
| `BETA` (real) | 0 is linear. Above 0, a pulse changes the device by `a exp(-BETA (W + 1) / 2)` up or `a exp(-BETA (1 - W) / 2)` down: large steps near one end of the range, small near the other |
| `STEPS` | pulses that span [-1, 1] when `BETA > 0`; sets `a = 2 (e^BETA - 1) / (BETA STEPS)`. Default 14, the 4-bit device |
| `PROG_SIGMA` | standard deviation, in Q2.14 units, of random noise added to each pulse's step |
| `READ_SIGMA` | standard deviation, in Q2.14 units, of random noise added to each device every time it takes part in a product |

The noise is the sum of four uniform random numbers, scaled to the requested
standard deviation. This is close to Gaussian. It is meant for simulation, and so
is the exponential. The model elaborates that code only when one of the
options is on; with all of them off it is plain integer logic. The formula for `a` comes
from the continuous limit. With it, `STEPS` pulses take a device from one end
of the range to the other for any `BETA`, so devices with different
non-linearity can be compared fairly.

`tb_mp_trainer_devices` trains the 12-6-4 network three times on one image:
with `BETA = 5`, with programming noise of one step, and with read noise of
5 % of the range. For each run it checks that devices were programmed and
that the output error on that image fell.

## What is modelled and what is not

Modelled:

* the mixed-precision update scheme, with separate potentiation and
  depression granularities;
* the forward and transposed crossbar products with 8-bit converters;
* blind multi-pulse programming;
* a device clipped to [-1, 1] that is linear, exponentially non-linear,
  stochastic when programmed, noisy when read, or any mix of these.

Not modelled:

* the measured phase-change-memory model, with two devices per synapse in
  differential configuration and weight refresh. Its fitted curves were not
  available as numbers;
* converter resolutions other than 8 bits. They would need width changes in
  `mp_pkg`;
* the device initialisation to {-1, 0, +1}, with variance scaled by the layer
  sizes. The host does this through the init port. The testbenches use sparse
  random {-1, 0, +1} weights.

Own choices that the original leaves open:

* the fixed-point formats and converter ranges;
* the PLAN sigmoid;
* the power-of-two error normalisation;
* the 15-pulse limit per request;
* the pulse shape;
* one line read out per cycle through a shared ADC (the physical array forms
  all line sums at once);
* the two-cycle single-port accumulator;
* the sequencing and handshakes.
