# A pipelined GRU-flow accelerator for digital-twin model recovery

A digital twin of a patient is a small ODE model, for example three states of
insulin and glucose, whose coefficients are refitted again and again to the
patient's measurements. The learning methods used for this (physics-informed
networks, Neural-ODE pipelines) all contain a Neural ODE layer. In the forward
pass that layer integrates a learned vector field from time 0 to every sample
time. An ODE solver is a loop in which each step needs the result of the step
before, so it pipelines poorly in hardware.

This design replaces that layer with a **neural flow**. A neural flow is a
network that directly gives the solution `z(t) = F(t, z0)` of some ODE, without
integrating. `F` is built so that `F(0, z0) = z0` and so that it is invertible in
`z0`, the two properties an ODE solution has. Once the solution at time `t` is a
closed-form function of `(t, z0)`, every sample of a time series is independent
of the others. The whole forward pass then becomes a feed-forward pipeline that
takes one sample per clock cycle.

The RTL here is that pipeline for a low-cost FPGA next to an embedded
processor. The processor loads the model over AXI4-Lite and sends one measured
series in through a DMA stream. For every sample the accelerator returns the
flow state `z(t_i)` and a lifted vector `nu_i` on a second stream. It also
accumulates the reconstruction loss of the whole series and, in the same
pass, backpropagates that loss through the flow layer. The host reads the
gradients back, or lets the accelerator take a gradient-descent step with one
register write.

## Data flow

```
          AXI4-Lite (host)                              AXI4-Stream (DMA)
               |                                               |
         +-----------+  z0, weights, dt, II, mask      +---------------+
         | axil_regs |-------------------------+       | sample_buffer |  200 x (3 states + 2 inputs)
         +-----------+                         |       +---------------+  every element a register
               ^ start                         |         |u_i      |x_i (3 cycles later)
               v                               v         v         |
         +---------+  (i, t_i = i*dt)   +---------------------+    |
         | mr_ctrl |------------------->|    gru_flow_cell    |    |
         +---------+  every II cycles   |  3 pipeline stages  |    |
              ^                         +---------------------+    |
              | retire                        | z(t_i)             v
              |                               +------------> loss_unit --> LOSS
              |                               +-- + aux ---> flow_grad --> gradients, SGD step
              |                               v
              |                        +-------------+
              |                        | dense_layer |  nu_i = tanh(W z + b)
              |                        +-------------+
              |                               | {nu_i, z(t_i)}
              +------------------------- m_axis (DMA) --> host: sparsity selection, ODE fit
```

For sample `i` the controller issues the index and the time `t_i = i*dt`.
Buffer port A reads the sample's external inputs `u_i`. The GRU flow layer
evaluates `z(t_i) = F(t_i, z0; u_i)` in three stages. Buffer port B then reads
the measured states `x_i` of the same sample, and the loss unit adds
`|z(t_i) - x_i|^2` over the enabled states. The dense layer turns `z(t_i)` into
`nu_i` in one more stage, and the pair leaves on the result stream. Beside the
dense layer, `flow_grad` takes the same sample's error and the cell's
intermediate values and adds the sample's gradient to a running sum for every
flow-layer parameter.

Two stages of the recovery method run on the host. One picks a sparse set of
coefficients `theta` out of `nu`. The other integrates that low-order model with
an ordinary solver to check it. The encoder that produces `z0` from raw
measurements also runs on the host. None of these is in this RTL (see *Not in
this RTL*).

## The GRU flow cell

`gru_flow_cell` is the core of the design and the part most worth reading. With
`h = z0` (N = 3 states), time `t` and the sample's inputs `u` (M = 2), it computes

```
r  = 0.8 * sigmoid(W_r h       + U_r t + V_r u + b_r)     reset gate,  in (0, 0.8)
zg = 0.4 * sigmoid(W_z h       + U_z t + V_z u + b_z)     update gate, in (0, 0.4)
c  =       tanh   (W_c (r .* h) + U_c t + V_c u + b_c)    candidate
F  = h + tanh(t) .* (1 - zg) .* (c - h)
```

This is a GRU cell whose update is scaled by a time embedding, `tanh(t)`:

* At `t = 0` the embedding is 0 and `F = z0` exactly, bit for bit in the fixed
  point used here. This is the initial-value property of an ODE solution, and
  the testbench checks it.
* The bounds 0.4 and 0.8 on the two gates keep `F - h` a contraction in `h`.
  The map `h -> F` is then the identity plus a contraction, and such a map is
  invertible. This is the condition that
  makes the network a flow rather than an arbitrary recurrent map. The
  constants are `ALPHA_ZG` and `BETA_R` in `mr_pkg`.
* `t` enters as an input, not as a number of recurrent steps. Sample 150 costs
  the same as sample 1, and no sample depends on another. This is what lets the
  pipeline start a new sample every cycle.

The cell is cut into three register stages:

| stage | computes | registers |
|---|---|---|
| 1 | `W_r h + U_r t + V_r u + b_r`, same for `zg`; sigmoids; `tanh(t)` | `r`, `zg`, `tanh(t)`, `h`, `t`, `u` |
| 2 | `r .* h`; `W_c (r .* h) + U_c t + V_c u + b_c`; tanh | `c`, `zg`, `tanh(t)`, `h` |
| 3 | `h + tanh(t) (1 - zg)(c - h)` | output `F` |

Stages 1 and 2 also register the slopes of the activations they used, and all
intermediates travel with the sample. They leave the cell on `aux_*`, aligned
with `F`, for backpropagation.

Each weight is a separate register in `axil_regs`, wired straight to its own
multiplier. No memory port is shared, so the multipliers never wait for one.
Stage 1 is the longest path: three parallel 6-term dot products and a
piecewise-linear sigmoid.

## Number format and activations

Every datapath value is 16-bit signed Q4.12: range [-8, 8), step 1/4096.
Products are 32 bits wide, shifted right arithmetically by 12 (truncation
toward minus infinity) and summed at 32 bits. A neuron's sum is saturated to 16
bits before its activation. The helpers are `fx_mul` and `fx_sat` in `mr_pkg`.

`pwl_act` gives both nonlinearities from one shift-and-add sigmoid with four
segments:

```
|x| >= 5          1
2.375 <= |x| < 5  |x|/32 + 0.84375
1 <= |x| < 2.375  |x|/8  + 0.625
|x| < 1           |x|/4  + 0.5          sigmoid(-x) = 1 - sigmoid(x)
```

`tanh(x)` is taken as `2*sigmoid(2x) - 1`. The worst errors against the exact
functions are about 0.019 for sigmoid and 0.04 for tanh. A network trained in
floating point should be fine-tuned with these activations before its weights
are loaded; the on-chip training step below does exactly that. `pwl_act` also
outputs the slope of the segment it used (`dy`), which is the derivative that
backpropagation uses.

## Pipeline control: II, stalls, timing

`mr_ctrl` starts sample `i` every `II` cycles, with II = 1, 2 or 3 taken from a
register (0 counts as 1). The source ran its high-level-synthesis loop at II = 1
and kept II = 2 and 3 as fallbacks in case a dependency showed up. Here all
three are run-time settings, so the three can be compared on the same bitstream.
Because no sample depends on another, II = 1 is always safe in this RTL. The
larger values only slow the run down.

* Latency: a sample leaves on `m_axis` 4 cycles after it is issued (3 GRU
  stages and 1 dense stage).
* Run length: with an always-ready output, a run of `n` samples takes
  `(n-1)*II + 5` cycles from start to done: 204 cycles for 200 samples at II = 1.
  The `CYCLES` register reports this count.
* Stall: the whole pipeline shares one enable, `en = !m_axis_tvalid || m_axis_tready`.
  When the DMA is not ready, every stage, the II counter and the issue counter
  hold. Nothing is lost, and the result on the bus stays stable, which an
  assertion in the top checks.
* Done: set once the last result has been accepted on `m_axis`, so the loss is
  complete by then. `irq` mirrors it.

## Loss

`loss_unit` adds, for every sample leaving the GRU flow layer,
`sum over enabled states of floor((z - x)^2 / 4096)`. The sum is 48 bits wide
and on the Q.12 scale, so 4096 means 1.0. It is cleared by `start`. The `MASK`
register chooses which states count. In the insulin twin only glucose (state 2)
is measured, so there `MASK = 0b100`, and the two hidden insulin states are fitted
only through their effect on glucose.

## Backpropagation and training

`flow_grad` differentiates the loss above with respect to every parameter of
the flow layer: `W`, `U`, `V` and `b` of all three gates, 63 numbers at the
default sizes. The chain rule through the cell's equations gives, per sample,
with `e = 2 (z - x)` on the enabled states and `phi = tanh(t)`:

```
dL/dpc[k] = e[k] phi (1 - zg[k]) tanh'(pc[k])            pc: candidate pre-activation
dL/dpz[k] = -e[k] phi (c[k] - h[k]) 0.4 sigmoid'(pz[k])  pz: update-gate pre-activation
dL/dpr[j] = (sum_k dL/dpc[k] W_c[k][j]) h[j] 0.8 sigmoid'(pr[j])
```

The gradient of each weight is then the product of its gate's `dL/dp` with
that weight's input. For the candidate the input is `r .* h`; for the two gates
it is `h`; for time weights it is `t`, for input weights `u`, and for biases 1.
One register stage forms the three `dL/dp` vectors (saturated to Q4.12), and 63
multiply-adds accumulate the products into 48-bit sums. A sample's
contribution lands on the same clock edge on which its result leaves on
`m_axis`. The unit advances with the shared enable, so it stalls with
everything else. `start` clears the sums. When `done` rises they hold the
gradient of the whole run.

Training is plain gradient descent. Writing CTRL bit 2 while no run is active
replaces every flow-layer parameter `p` by `sat16(p - (g >>> s))`, where `g` is
its gradient and `s` is the `LR` register. The learning rate is thus `2^-s`.
The host's training loop is: run, step, run, step, and so on. It needs no data
movement except the start and step writes. The dense layer is not trained
here, because `nu` does not enter this loss.

## Host interface

### Register map (AXI4-Lite, 12-bit byte address, 32-bit data)

| address | name | access | meaning |
|---|---|---|---|
| 0x000 | CTRL | W | bit 0 start a run; bit 1 clear the sample buffer; bit 2 training step (ignored while busy) |
| 0x004 | STATUS | R | bit 0 busy, bit 1 done, bits 31:16 samples in buffer |
| 0x008 | NSAMP | RW | samples per run (reset 200, clipped to the buffer size) |
| 0x00C | DT | RW | time step, Q4.12 (reset 0) |
| 0x010 | II | RW | initiation interval, bits 1:0 (reset 1) |
| 0x014 | MASK | RW | states included in the loss (reset all) |
| 0x018 / 0x01C | LOSS_LO / LOSS_HI | R | loss bits 31:0 / 47:32 |
| 0x020 | CYCLES | R | cycles of the last run |
| 0x024 | LR | RW | learning-rate shift `s`, bits 5:0 (reset 8) |
| 0x040 + 4i | Z0[i] | RW | initial latent state |
| 0x100 + 4(g*N*N + r*N + c) | W | RW | GRU state weights, gate g: 0 = r, 1 = zg, 2 = c |
| 0x200 + 4(g*N + r) | U | RW | GRU time weights |
| 0x280 + 4(g*N + r) | B | RW | GRU biases |
| 0x500 + 4(g*N*M + r*M + c) | V | RW | GRU input weights |
| 0x300 + 4(k*N + c) | DW | RW | dense weights, k < NV |
| 0x400 + 4k | DB | RW | dense biases |
| 0x600 + 4k | GRAD | R | loss gradients, Q.12 saturated to 32 bits: k over W (27), then U (9), B (9), V (18) |

Data values sit in bits 15:0 and read back sign-extended. WSTRB bytes 0 and 1
are honoured. Every response is OKAY. Writing weights during a run is not
blocked, so the host should not do it.

### Streams

* `s_axis` in: one sample per beat, `(N+M)*16` bits: states `x[0..2]` in the low
  48 bits, then inputs `u[0..1]`. Samples fill the buffer from index 0. Once it
  holds 200 samples, `tready` stays low until the buffer is cleared.
* `m_axis` out: one result per sample, `(N+NV)*16` bits: `z[0..2]` in the low
  48 bits, then `nu[0..9]`. `tlast` is set on the last sample of the run.

### A run

1. Write Z0, W, U, V, B, DW, DB, DT, NSAMP, II and MASK.
2. Write CTRL = 2 to clear the buffer, then stream the series in.
3. Write CTRL = 1, and collect the results from `m_axis`.
4. Wait for `irq` or STATUS.done, then read LOSS, CYCLES and, if wanted, GRAD.
5. To train, write LR once, then CTRL = 4 (step) and CTRL = 1 (run) in turn.

Weights and `z0` can be reloaded without reloading the series.

## Sizes

| parameter | default | origin |
|---|---|---|
| `N` states | 3 | both twins in the source have three states |
| `M` external inputs | 2 | basal insulin and glucose appearance rate of the insulin twin |
| `DEPTH` samples | 200 | one OhioT1DM series (16 h 40 min at 5-minute CGM sampling) |
| `NV` width of nu | 10 | this design: number of monomials of degree <= 2 in 3 variables, C(2+3, 3) |
| word | Q4.12 | this design |

At these defaults the whole accelerator synthesises (generic, before
technology mapping) to about 6,100 word-level cells and 6,600 flip-flops.
About half of the flip-flops are the 63 gradient sums of 48 bits each. It
also holds 16,000 bits of sample storage, kept in registers because the buffer
is fully partitioned. The register map has room for `3*N*N <= 64`,
`NV*N <= 64`, `3*N*M <= 64` and `3*N*N + 6*N + 3*N*M <= 64` gradients. An
elaboration-time assertion in `axil_regs` flags sizes that would overlap.

The insulin workload fits as is: 14 series of 200 samples, loaded one series at
a time. The cardiac twin also has three states. Its series length is not known
here, and a series longer than 200 samples has to be sent in windows.

`tb_workload_twins` plays both workloads on the default-size accelerator,
with series generated from the two twins' equations:

* 14 insulin-glucose series, from Euler steps of the three-state insulin and
  glucose model with per-series coefficients and three meals each. Glucose is
  the only measured state.
* 2 ECG series, from the limit-cycle ECG model with its P, Q, R, S and T
  waves and respiratory baseline wander.

For each series the testbench loads it, fits for four training steps, and
checks every run: 204 cycles, every `z`, and the exact loss. The loss falls on
all 16 series, for example from 60.3 to 4.9 on the first insulin series.

## What follows the source and what is this design's own

Taken from the source design:
* The network that is accelerated: a GRU-based flow layer in place of the Neural
  ODE, followed by a dense "analytical inverse" layer that produces the
  high-dimensional vector `nu`.
* Loss computation and backpropagation in the same pipeline.
* Complete partitioning of the input array into registers.
* Loop pipelining at II = 1, with II = 2 and 3 as options.
* AXI4-Lite control and DMA data transfer.
* Sizes: three states, two external inputs and 200 samples.

Chosen here, where the source is silent:
* The exact GRU-flow equations. They follow the published GRU flow, with
  `tanh(t)` as time embedding and the external input added to each gate.
* tanh as the dense layer's activation, and `NV = 10`.
* Q4.12 arithmetic and the piecewise-linear activations.
* The squared-error loss with a state mask.
* What backpropagation trains (the flow layer, against that loss), the
  piecewise-linear slopes as derivatives, and the optimizer: gradient descent
  with a power-of-two learning rate.
* The register map, the stream formats, the stall scheme and the three-stage
  split of the cell.

The source reports a 173 MHz clock for its synthesised design. This RTL has not
been through FPGA timing closure, so whether stage 1 closes at that frequency
is not known.

## Not in this RTL

* **Training beyond the flow layer.** The source's full objective also runs
  through the sparse selection and the low-order solver on the host; gradients
  through those parts, and any training of the dense layer, are left to the
  host. It gets per-sample `z` and `nu` on the stream for this. Optimizers
  other than plain gradient descent (momentum, Adam) are not built.
* **Sparsity-guided dropout and the low-order ODE solver**, which turn `nu` into
  the final sparse model. Both run on the host.
* **The encoder and decoder** of the surrounding auto-encoder. `z0` is written
  as a register.
* **The processor, DRAM and DMA engine.** These are vendor parts; the top
  exposes the AXI ports they connect to.

## Files and simulation

`rtl/` holds one module or package per file. `mr_pkg` holds the shared types,
sizes and fixed-point helpers. `mr_accel_top` instantiates `axil_regs`,
`sample_buffer`, `mr_ctrl`, `gru_flow_cell` (using `pwl_act`), `loss_unit`,
`flow_grad` and `dense_layer`.

Each module has a self-checking testbench `tb/tb_<module>.sv`, and `tb_ref_pkg`
holds their reference models. The references are written in double precision,
independently of the fixed-point RTL, and results are compared with a tolerance.
The loss is also checked exactly, against the streamed `z` values.
`tb_mr_accel_top` runs the top at its default sizes through its ports only. It
makes four runs: 200 samples at II = 1 with the cycle count checked; 200 at
II = 2 with random output stalls; 50 at II = 3 with a masked loss; and, after a
buffer clear, 20 samples with stalls. After every run it reads all 63
gradients and compares them with a double-precision chain-rule model. It then
plays five training steps at `s = 6`, checks each updated parameter, and
checks that the loss falls (on the default seed, from 54.1 to 35.2). It also
overfills the buffer and checks that the extra beats are refused. Every testbench ends by printing
`TB_RESULT checks=<n> failures=<m>`.

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/mr_pkg.sv tb/tb_ref_pkg.sv tb/tb_mr_accel_top.sv --top-module tb_mr_accel_top
./obj_dir/Vtb_mr_accel_top
```

Replace the last file and the top-module name to run any other testbench,
for example `tb/tb_workload_twins.sv` for the two workloads.
`verilator --lint-only -Wall rtl/mr_pkg.sv rtl/mr_accel_top.sv -y rtl` lints the
design. The remaining lint warnings are: unused low address bits; unused
upper bits in the byte-strobe helper; the two activation slopes nobody needs
(of `tanh(t)` and of the dense layer), left unconnected; and the assertions'
synchronous use of the asynchronous reset.
