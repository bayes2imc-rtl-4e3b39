# Bayes2IMC in SystemVerilog: sampling binary Bayesian weights inside a PCM crossbar

A Bayesian binary neural network does not have one weight per synapse. It has a *probability*
`p_w = Pr(w = +1)` per synapse, and it predicts by running the network several times
(`N_MC` = 10 here), each time with freshly drawn ±1 weights, and averaging the softmax outputs.
The average is better calibrated than a single network's answer, and its spread measures how
uncertain the prediction is. The expensive part is the sampling: every MVM needs a new random
bit for every weight.

Bayes2IMC does that sampling inside the memory array that stores the weights. It needs no random
number generator per weight and no ADC. The reparametrisation behind it:

```
w = +1  if  zeta <= z_w ,  zeta ~ N(0,1),  z_w = Phi^-1(p_w)
```

`z_w` is stored as the conductance difference `G+ - G-` of a differential phase-change-memory
(DPCM) cell, scaled by `kappa = 8`. These cells form the 128-row **weight plane** (WP). The Gaussian
`zeta` comes from 16 extra **noise-plane** (NP) rows. Their two devices are programmed to the same
target conductance, so their difference is the random programming error. Reading a WP row
together with an NP row puts both currents on the same pair of source lines. The sign of the
integrated current difference is then the weight sample. That sample decides whether the
column's accumulator adds or subtracts the input `x_j` broadcast to the row.

This RTL implements that scheme from the crossbar up to the final class probabilities:

- **Cores.** Each core has a 144 × 128 crossbar, stochastic noise-row arbitration, integrators
  and sense amplifiers, column accumulators and transfer registers.
- **Tiles.** A tile holds several cores plus batch-normalisation, ReLU and max-pooling.
- **Drift compensation.** It is done by stretching or shortening the read pulses.
- **Post-processing.** The unit corrects the output logits for device non-idealities, applies
  softmax and averages the ensemble.

The analog parts (PCM devices, integrating capacitors and sense amplifiers) are **behavioural
models** written in synthesizable style. Everything else is ordinary synthesizable logic.

## 1. Hierarchy

```
b2i_top                       NTILES = 2 tiles, shared T_NP, post-processing unit
├── drift_comp                time since programming -> noise pulse length T_NP
├── b2i_tile  (x NTILES)      NCORES = 4 cores working on one layer in lock step
│   ├── act_buffer (x NCORES) input bank of each core (128 x 8 bit)
│   ├── b2i_core   (x NCORES)
│   │   ├── core_ctrl         row-by-row read sequencer (FSM)
│   │   ├── np_arbiter        LFSR-driven choice of the NP row(s)  ── lfsr32
│   │   ├── wl_decoder (x2)   WP and NP word-line decoders
│   │   ├── sl_decoder        source-line select (all on for read, one device for write)
│   │   ├── dpcm_crossbar     behavioural 144 x 128 DPCM array
│   │   ├── sl_integrator     behavioural integrators + differential sense amplifiers
│   │   ├── column_acc        128 x 16-bit add/subtract accumulators
│   │   └── tx_reg_mux        transfer registers + output column multiplexer
│   ├── bn_coeff_mem          128 BN (gain, offset) pairs
│   ├── neuron_unit           partial-sum add, BN, ReLU, saturation, max-pool, logit bypass
│   └── act_buffer            output activations
└── post_proc_unit            logit correction (logit_corr), softmax, N_MC average, arg-max
```

`b2i_pkg` holds the shared sizes and the logit-correction coefficient struct `lc_coef_t`.

## 2. How one weight sample is read (the core)

This is the heart of the design, and the part most worth reading in `core_ctrl.sv`,
`sl_integrator.sv` and `dpcm_crossbar.sv`.

The noise must weigh as much as the stored parameter. The WP stores `kappa * z_w`, so the NP
contribution must be scaled by `kappa` too. The crossbar does this in time, not in amplitude. The WP
word line is on for `T_WP` = 1 clock cycle, and the NP word line for `T_NP` cycles. The integrated
charge difference of a column is then

```
Q+ - Q-  =  (Gw+ - Gw-) * T_WP  +  (Gn+ - Gn-) * T_NP
```

With `T_NP = kappa * T_WP` its sign is `sign(z_w - zeta)`, which is the sample. A tie gives +1.

**Read modes.**

| mode | NP rows per WP row (`n_r`) | T_NP (cycles) | cycles per row | MVM latency |
|---|---|---|---|---|
| standard | 1 | 8 | 8 | 1027 |
| high throughput | 2 | 4 | 4 | 515 |
| high throughput after 1e7 s of drift (compensated) | 2 | 2 | 2 | 259 |
| frequentist (deterministic weights, NP off) | 0 | – | 1 | 131 |

- **n_r = 2.** Two NP rows are switched on together. The pulse is then halved,
  `T_NP = kappa / n_r`, and the summed current of the two rows must stand for one noise cell.
  This works as long as the NP cells are programmed with conductances scaled to suit, which is
  left to whoever writes the NP codes. The RTL only halves the pulse and reads two rows.
- **Frequentist mode.** The same array serves as an ordinary binary network, `w = sign(G+ - G-)`.
  The NP is not read and each row takes one cycle.
- **Latency.** It is `128 * T_NP + 3` cycles from the cycle after `start` to `done`.

**Cycle schedule of one MVM** (row `j`, `P = T_NP` cycles per row):

```
cycle within row j :  0                1 .. P-1
WP word line j     :  on               off
NP word line(s)    :  on               on           (rows chosen by np_arbiter)
integrators        :  restart          accumulate
sense amplifiers   :  decide row j-1   -
input buffer       :  read x_{j-1}     -
accumulators       :  -                add/sub x_{j-1} (cycle 1)
```

The NP rows for row `j` are drawn in the last cycle of row `j-1`. After row 127 come one more
sense cycle, one more accumulate cycle and the load into the transfer registers. From there the
128 column sums leave one per cycle on a valid/ready stream while the next MVM already runs. If a
new MVM finishes while the previous one is still being streamed out, the core waits in its load
state and reports `stall`. This happens when the post-processing unit holds back the logit
stream.

**Noise-row arbitration** (`np_arbiter`). A 32-bit Galois LFSR (`x^32+x^22+x^2+x+1`) provides four
bytes per step. Each draw uses the low four bits of the next byte as the NP row, and the LFSR only
steps after all four bytes are used. With `n_r = 2` the two rows come from two adjacent bytes. If
those are equal, the second row's lowest bit is flipped so that two different cells are read.
Each core gets its own seed: `seed + 1024*tile + core`.

## 3. Drift compensation (`drift_comp`)

PCM conductances decay as `(t/T0)^-nu`. Because `z_w` is a *scaled* Gaussian quantile, a single
global factor `alpha_t = (t/T0)^nu_c` with `nu_c = 0.06` and `T0 = 20 s` restores the sampling
probabilities. It is applied by shortening the noise pulse:

```
T_NP = round( kappa / (n_r * alpha_t) )      (whole clock cycles)
```

At run time no power is evaluated. The instants at which the rounded value drops by one are
computed at elaboration: `t_m = T0 * (kappa / (n_r (m + 1/2)))^(1/nu_c)`. The input `t_s`
(seconds since programming, 32 bits) is compared against them. With `n_r = 2` this gives 4 right
after programming and 2 at `t = 1e7 s`. The output `t_np` goes to all cores. With `comp_en` low,
`t_np` is simply `kappa / n_r`.

## 4. From cores to layers (the tile)

A layer with more than 128 inputs is split over the 4 cores of a tile: core `k` holds input rows
`128k … 128k+127`. All cores start together and stream the same column in the same cycle, which is
asserted in the tile. The neuron unit then processes each column in two pipeline stages:

1. Add the four partial sums into a 19-bit pre-activation.
2. Apply batch normalisation with one multiplier and adder, `y = ((a*s) >>> 8) + b`, where `a`
   is Q8.8 and `b` is an integer, both signed 16-bit from `bn_coeff_mem`. Then ReLU, and
   saturation to 0…127. Finally max-pooling over `pool_n` consecutive output vectors.

The resulting activations go to the tile's output buffer, from which the host copies them into
the input banks of the tile that runs the next layer.

**Last-layer bypass.** With `last_layer` set, BN, ReLU and pooling are skipped. The 19-bit sums
leave as logits on a valid/ready stream to the post-processing unit. This is the only place
where back-pressure enters the tile: `logit_ready` low holds the neuron unit. That holds the
transfer-register stream of all cores, which in turn can stall the next MVM.

## 5. Post-processing: logit correction, softmax, ensemble

On real devices the logits of the last layer are distorted: programming noise and drift change
their scale and offset. For each class `k`, a calibration run yields Gaussian statistics of the
hardware logit `L` for inputs of class `k` (`mu~1, sigma~1`) and of other classes
(`mu~0, sigma~0`). The ideal network's statistics are `mu1, sigma1, mu0, sigma0`. The corrected
logit is the posterior-weighted mix of the two affine maps:

```
l^  = P1 * (a1 L + b1) + (1 - P1) * (a0 L + b0),   a_c = sigma_c / sigma~_c,  b_c = mu_c - a_c mu~_c
P1  = Pr(y = k | L) = 1 / (1 + exp(qa L^2 + qb L + qc))
```

`qa`, `qb` and `qc` are the quadratic form of Bayes' rule for the two Gaussians with priors
`1/n` and `(n-1)/n`. All seven numbers are computed off-line and loaded per class through
`cfg_we/cfg_cls/cfg_coef`.

`logit_corr` evaluates the formula in fixed point:

| quantity | format |
|---|---|
| `a1`, `a0` | Q4.12 |
| `b1`, `b0` and the result | Q.8 |
| `qa` | Q.36 |
| `qb` | Q.28 |
| `qc` | Q.16 |

The exponent is clamped to [-8, 8), and the logistic function comes from a 256-entry table with
step 1/16.

`post_proc_unit` collects the 10 class logits of a member (later columns are dropped) and then
takes 11 cycles, with `in_ready` low:

- one cycle for the maximum and `exp(l_k - max)`, from a 256-entry table covering 0 … -16 in
  steps of 1/16;
- then one division per class, adding `p_k` to a running sum.

After `N_MC` members it pulses `res_valid` with the averaged probabilities (Q1.16) and the
arg-max class, then starts over. Both tables are computed at elaboration from their formulas.

## 6. Host interface of `b2i_top`

The chip controller that schedules layers onto tiles is not part of this design. Its duties are
the top's ports:

| port | purpose |
|---|---|
| `prog_*` (tile, core, plane, row, column, device, code) | Writes one device's conductance code in one cycle. This stands for the result of program-and-verify programming, programming noise included. |
| `bn_*` | Loads BN coefficients per tile. |
| `in_*` | Writes input banks. |
| `out_tile/out_raddr/out_rdata` | Reads a tile's output buffer. The data arrives one cycle after the address. |
| `start[t]`, `pool_n[t]`, `last_layer[t]` | Control tile `t`. |
| `busy`, `mvm_done`, `vec_done`, `stall` | Report tile `t`'s state. |
| `nr2`, `freq_mode`, `comp_en`, `t_s` | Global read mode. `t_np` is output for observation. |
| `ppu_tile`, `lc_en`, `cfg_*` | Choose the tile feeding the post-processing unit, enable correction, load coefficients. |
| `res_valid/res_prob/res_class/member_done` | Ensemble result. |

A typical inference:

1. Program the crossbars once.
2. Load each layer's inputs.
3. Start the tile and wait for `busy` to fall (twice for a pooled layer).
4. Copy the activations on to the next layer.
5. On the last layer, start `N_MC` times with `last_layer` set.

## 7. What follows the scheme and what is this implementation's choice

These follow the scheme as published:

- a 144 × 128 core with 128 WP and 16 NP rows;
- 8-bit inputs and 16-bit accumulators;
- `kappa = 8`, `T_WP` = 1 cycle, T_NP = 8 / 4 / 2;
- `n_r` of 1 or 2, and a 32-bit LFSR whose four bytes are all used;
- row-by-row reading, add/subtract accumulation and transfer registers that overlap the next MVM;
- tile-level partial-sum accumulation, a single BN multiplier/adder per tile, ReLU and pooling;
- the drift formula with `nu_c = 0.06`;
- the logit-correction formula, softmax and `N_MC = 10`.

These are this implementation's own choices, where the scheme gives only the function:

- the number of tiles (2) and cores per tile (4);
- the conductance code (8 bits, 0.1 µS per LSB);
- the exact pulse placement (WP pulse in the first cycle of the NP pulse) and the sense/accumulate
  pipelining;
- the LFSR polynomial, and the rule that two equal NP rows become distinct;
- all handshakes (valid/ready streams, the stall rule);
- all fixed-point formats and table sizes of BN, logit correction and softmax;
- the threshold-table form of the drift compensation;
- saturating activations to 0…127;
- the host-facing ports.

These are **not** built:

- the program-and-verify write circuitry (ADC/DAC), which is modelled by the direct write port;
- bit-line precharge and read-voltage drivers;
- the chip-level controller;
- a chip-level I/O buffer separate from the tile buffers;
- use of the 16 NP rows as extra weight rows in frequentist mode. The scheme allows it, but here
  frequentist mode reads only the 128 WP rows;
- on-chip summation of partial sums across tiles or across repeated MVMs, for layers wider
  than 512 inputs. The host must add those.

**Behavioural models.** The crossbar model stores integer conductance codes. It sums only the
read patterns the controller generates (one WP row and up to two NP rows), and an assertion
checks that no other pattern occurs. Read noise and drift are not modelled; drift can be imitated
by rewriting codes. The integrator model accumulates current codes once per cycle.

## 8. Capacity

One tile MVM covers 512 inputs × 128 outputs. The whole default configuration holds
2 × 4 × 128 × 128 = 131,072 weight parameters. A VGG-style binary network for CIFAR-10 (around
14 M weights, with convolution layers of up to 4,608 inputs per output) therefore runs only layer
slice by layer slice, with reprogramming and host-side accumulation. The 10-class output layer,
the 10-member ensemble and drift times up to 1e7 s (and far beyond, `t_s` is 32 bits) fit
directly.

## 9. Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_b2i_top` | Full size, default parameters, ~11 s. A two-layer network end to end (details below). |
| `tb_b2i_core` | Full-size core. Every column sum in all four read modes, the `128*T_NP+3` latency, and a transfer-register stall. |
| `tb_b2i_tile` | Partial-sum addition, BN/ReLU, pooling, and the logit stream under random back-pressure. |
| `tb_np_arbiter` | The LFSR sequence, byte reuse and the distinct-row rule. |
| `tb_drift_comp` | The rounded formula over time. |
| `tb_post_proc_unit` | Against a floating-point model of correction, softmax and averaging (tolerance 0.04). |
| the remaining unit tests | Each against an independent model. |

In `tb_b2i_top`:

- **Layer 1** is 512 inputs on tile 0's four cores, max-pooled over two stochastic passes.
- **Layer 2** is 128 inputs on tile 1, run as the last layer.
- **Three ensembles of 10** run on layer 2:
  - A: `n_r = 1` with correction on;
  - B: `n_r = 2`, drift-compensated to T_NP = 2, with correction off;
  - C: frequentist, started back to back to force stalls.
- **Exact checks.** The testbench programs random conductances and models every core's LFSR
  draws and charge comparisons. So it checks the layer-1 activations and every logit exactly.
  The probabilities are checked against the floating-point model.
- **Mechanism counts.** It counts how often each mechanism happened: stochastic sampling,
  `n_r = 2`, drift-compensated T_NP, frequentist mode, pooling, last-layer bypass, logit
  correction, stall and back-pressure. A mechanism that never happened is a failure.

To run a testbench with Verilator 5 (from the directory that holds `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal -Wno-lint -Wno-style \
  --top-module tb_b2i_top -y rtl -y tb +libext+.sv -Irtl rtl/b2i_pkg.sv tb/tb_b2i_top.sv
./obj_dir/Vtb_b2i_top
```

Memories and registers without reset (crossbar, buffers) are written before use by every
testbench, so the result does not depend on the simulator's initial values.

## 10. Changing the design

- **Geometry.** `WPR`, `NPR` and `NC` are parameters of the core, tile and top. Defaults come
  from `b2i_pkg`.
- **Drift compensation.** `KAPPA`, `T0_S` and `NU_C` are parameters of `drift_comp`.
- **Scaling.** `NTILES` and `NCORES` scale the top.
- **Ensemble.** `NCL` and `NMC` set the class count and ensemble size of the post-processing
  unit.
- **Real devices.** To model real devices (read noise, drift, non-linear I–V), only
  `dpcm_crossbar` and `sl_integrator` need to change. The digital blocks see only word lines,
  source-line currents and one sense bit per column.
