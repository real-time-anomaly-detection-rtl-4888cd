# AXOL1TL: an anomaly-detection trigger seed in SystemVerilog

The CMS Level-1 trigger has to decide, for every LHC bunch crossing (40 million per
second), whether the event is kept. Most of its algorithms look for a particular signature
chosen in advance: a high-energy muon, a large sum of jet energies, and so on. AXOL1TL
takes the opposite approach. A variational autoencoder is trained on ordinary collisions.
At run time only its encoder is evaluated. The encoder maps the event's trigger objects
to 8 latent means μ₁…μ₈. An ordinary event lands close to the origin of the latent space.
An unusual one lands far from it. The anomaly score

    score = μ₁² + μ₂² + … + μ₈²

measures that distance, and comparing it with thresholds gives trigger seeds that are
not tied to any physics model. The algorithm runs in the Global Trigger FPGA. It must
accept a new event every bunch crossing and answer within 50 ns.

This repository holds synthesizable RTL for that datapath:

- packing of the trigger objects into a feature vector;
- the encoder, built as fully parallel dense layers;
- the sum-of-squares score;
- five threshold seeds, from "very tight" to "very loose";
- per-seed rate counters.

It is not the firmware that was deployed at CMS. That firmware was generated by a
high-level-synthesis flow from a trained, quantized network, and neither its weights nor
its layer sizes are given in the description this RTL follows. The weights are therefore
loaded at run time. Every choice that is this design's own is listed under
[Where this RTL departs from, or adds to, the published design](#where-this-rtl-departs-from-or-adds-to-the-published-design).

## Data flow and timing

```
            cycle t                      cycle t+1                       cycle t+2
 jet[10] ┐
 eg[4]   ├─► input assembly ─► 57 features ─► axo_encoder ─► μ[8] ─► anomaly_score ─► seed_thresholds ─► trig[5], score
 mu[4]   │   (combinational)                  (3 dense layers,  reg   (combinational)     (5 compares,      reg
 met     ┘                                     combinational)                               registered)
                                                                                               │
                                                                                               └─► seed_rate_monitor ─► rate[5]
```

- **Throughput:** one event per clock, so the initiation interval is 1. With a 40 MHz
  bunch-crossing clock this is one event per crossing. Nothing stalls and nothing is
  buffered.
- **Latency:** two clocks. Objects presented with `in_valid` in cycle t give `out_valid`,
  `score` and `trig` in cycle t+2. At 40 MHz that is exactly the 50 ns budget.
  - Stage 1 is the whole encoder, and the latent means are registered at its end.
  - Stage 2 is the score and the five comparisons, registered in `seed_thresholds`.
- **Gaps:** invalid cycles (`in_valid = 0`) pass through as `out_valid = 0`. No seed fires
  on them.

Two clocks for three dense layers plus a squarer tree is aggressive at 25 ns per clock.
The placement of the registers is a modelling choice that makes the cycle count match the
budget. Timing closure on a real FPGA has not been checked. If more stages are needed,
registers can be inserted between the layers inside `axo_encoder`. That adds one clock of
latency per register; the throughput stays the same.

## Input vector

Each object arrives as an `axo_pkg::l1_obj_t`:

| field | bits | meaning |
|---|---|---|
| `pt`  | 12, unsigned | transverse momentum, raw hardware count |
| `eta` | 9, signed | pseudorapidity index |
| `phi` | 10, unsigned | azimuth index |

These widths are wide enough for every object type. Narrower fields are zero-extended
(pT, φ) or sign-extended (η) by whatever drives the port.

`axol1tl_top` widens every field to a 13-bit signed feature. It orders them as follows,
with 3 features per object:

| features | object |
|---|---|
| 0 … 29  | jets 0…9: pT, η, φ each |
| 30 … 41 | e/γ 0…3 |
| 42 … 53 | muons 0…3 |
| 54 … 56 | missing E_T: pT, **0**, φ |

Missing transverse energy has no η. Its η slot is forced to zero so that the vector keeps
19 × 3 = 57 entries. Empty object slots are expected to arrive with all fields zero, as the
trigger hardware delivers them. The network then sees them as zero features.

## The encoder arithmetic

This is the part that needs the most care when loading a trained network.

`dense_layer` computes, for each output neuron o:

```
acc[o] = b[o] + Σᵢ W[o][i] · x[i]          exact; accumulator wide enough never to overflow
v[o]   = acc[o] >>> SHIFT                  arithmetic shift, i.e. floor(acc / 2^SHIFT)
v[o]   = max(v[o], 0)                      only if RELU = 1
y[o]   = clamp(v[o], -2^(OUT_W-1), 2^(OUT_W-1)-1)
```

All products of a layer are formed in the same clock. The x → y path is combinational.

`axo_encoder` chains three layers:

| layer | shape | activation | input word | output word |
|---|---|---|---|---|
| 1 | 57 → 32 | ReLU | 13-bit feature | 14-bit |
| 2 | 32 → 16 | ReLU | 14-bit | 14-bit |
| 3 | 16 → 8  | linear | 14-bit | 14-bit latent mean μ |

The default formats are set in `axo_pkg`:

- **Weights:** 8-bit signed with `W_FRAC = 6` fractional bits. They represent -2.0 to
  +1.984 in steps of 1/64.
- **Shift:** every layer shifts by `SHIFT = W_FRAC`. Activations therefore stay on the
  integer scale of the inputs: one LSB of a hidden activation is one LSB of the raw
  features.
- **Biases:** 24-bit signed, on the accumulator scale. They are added before the shift, so
  a real-valued bias β is loaded as `round(β · 2^W_FRAC)` in activation LSB units.
- **Saturation:** clamping to 14 bits limits hidden activations and μ to ±8191.

To load a network trained in floating point or with quantization-aware training:

1. Choose a scale s for the latent means, so that μ_real = μ_LSB / s.
2. Fold the input and hidden-layer scales into the weights and biases, then round.
3. Check that no layer saturates on typical events.

The score is then score_real = score_LSB / s². The thresholds are programmed in LSB
units, as score_real · s².

The decoder and the latent variances exist only during training and are not built. The
trigger needs only the means.

## Score and seeds

`anomaly_score` is an exact sum of eight squares, combinational and 30 bits wide. The
largest reachable value is 8 · 2²⁶, when all eight μ are at -8192.

`seed_thresholds` holds five thresholds. Seed s fires when `score >= thr[s]`. The seed
numbering is `axo_pkg::seed_e`:

| bit | seed | intended use |
|---|---|---|
| 0 | very tight | the rarest events, kept for full offline reconstruction |
| 1 | tight | |
| 2 | nominal | sent to the reduced-content "scouting" data stream |
| 3 | loose | |
| 4 | very loose | |

- **Reset:** every threshold resets to all ones, a value the score cannot reach. A freshly
  reset block therefore never fires.
- **Ordering:** the hardware does not enforce very tight ≥ tight ≥ … ≥ very loose. That
  ordering is up to whoever programs the thresholds.
- **Read-back:** the current thresholds are visible on `seed_thr`.
- **Assertion:** an assertion in `seed_thresholds` checks that no seed bit is ever set without `out_valid`.

## Rate monitor

`seed_rate_monitor` counts two things over a window of `RATE_WINDOW` clocks:

- the valid events;
- the events that fired each seed.

On the last clock of each window it copies the totals, including that clock's event, to
`rate[]` and `rate_events`. It pulses `rate_valid` for one clock and starts again from
zero. The default window is 40,000,000 clocks, which is one second at 40 MHz, so `rate[s]`
reads directly in Hz. The 26-bit counters cannot overflow even if a seed fires on every
crossing.

## Configuration port

There is one write-only word bus: `cfg_we`, a 16-bit `cfg_addr` and a 32-bit `cfg_data`.
One word is written per clock, and writes may be back to back.

| `cfg_addr[15:12]` | target | `cfg_addr[11:0]` | data bits used |
|---|---|---|---|
| 0 | layer 1 (57→32) | `o*57+i` → W[o][i]; `1824+o` → b[o] | [7:0] weight, [23:0] bias |
| 1 | layer 2 (32→16) | `o*32+i` → W[o][i]; `512+o` → b[o] | same |
| 2 | layer 3 (16→8)  | `o*16+i` → W[o][i]; `128+o` → b[o] | same |
| 3 | thresholds | seed number 0…4 | [29:0] |

- Indices outside these ranges are ignored.
- Reset (`rst_n` low, asynchronous) clears every weight and bias to zero.
- A full network load is 2,520 writes.
- Writing while events flow is allowed. An event in flight sees some mixture of the old and
  new values, so reprogram between runs, or accept that the results of a few events are
  undefined.

## Where this RTL departs from, or adds to, the published design

The published design fixes these points:

- the inputs: 10 jets, 4 e/γ, 4 muons and missing E_T, each as raw pT, η and φ;
- a dense feed-forward VAE encoder with 8 latent dimensions;
- the score Σμᵢ²;
- five thresholds with the names above;
- the 40 MHz event rate and the 50 ns latency;
- monitoring of the seed rates.

Everything else is this implementation's own:

- **Hidden layers:** the 32 and 16 neuron hidden widths and ReLU activations are assumed;
  the layer sizes of the deployed network are not given.
- **Number formats:** all word widths and fixed-point formats, the floor-shift-and-saturate
  requantization, and the 12/9/10-bit object fields are choices made here.
- **Weights and thresholds:** both are run-time registers behind a configuration port. The
  deployed firmware has its trained network built in, and no trained weights are given.
- **Feature order and MET:** the feature order, and zero as the η of missing E_T, are
  choices made here.
- **Clock and registers:** the 40 MHz clock and the two-register split of the 50 ns are
  assumed.
- **Threshold semantics:** `>=` as the comparison, and an unreachable reset value, are
  choices made here.
- **Rate counting:** the fixed-window counting scheme is the simplest circuit that yields a
  rate; the published design does not say how rates are counted.

These parts of the trigger are not built:

- **The calorimeter-image anomaly detector (CICADA) that runs beside AXOL1TL:** its
  deployed network is not described in enough detail.
- **The rest of the Global Trigger and the upstream trigger systems:** the seed bits and the
  object inputs are plain ports for them.

## Files

| file | contents |
|---|---|
| `rtl/axo_pkg.sv` | constants, object struct, seed enum, configuration bus struct and address map |
| `rtl/dense_layer.sv` | one parallel dense layer with its weight store |
| `rtl/axo_encoder.sv` | 57→32→16→8 encoder, output register |
| `rtl/anomaly_score.sv` | Σμ² |
| `rtl/seed_thresholds.sv` | five threshold registers and comparators, output register |
| `rtl/seed_rate_monitor.sv` | windowed per-seed counters |
| `rtl/axol1tl_top.sv` | input assembly and the connections between the blocks |
| `tb/axo_ref_pkg.sv` | 64-bit integer reference model of the network and score |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_axol1tl_full` |

## Verification

Every testbench:

- compares the RTL with values it computes itself;
- has a cycle watchdog;
- ends by printing `TB_RESULT checks=N failures=M`.

| testbench | what it shows |
|---|---|
| `tb_dense_layer` | a ReLU and a linear layer against a 64-bit model, with frequent saturation; ignored out-of-range writes; reset clearing |
| `tb_anomaly_score` | extreme, one-hot and random μ vectors; the largest score is exactly 2²⁹ |
| `tb_seed_thresholds` | nothing fires after reset; read-back; firing at exactly `thr` but not at `thr-1`; one-clock latency |
| `tb_seed_rate_monitor` | 40 windows of random traffic against the testbench's own counts; pulse spacing |
| `tb_axo_encoder` | full-size encoder against the reference model; one-clock latency; back-to-back inputs; ReLU and saturation exercised |
| `tb_axol1tl_top` | end to end with a 16-clock rate window (details below) |
| `tb_axol1tl_full` | the same flow with every parameter at its default: full network and one-second rate window |

`tb_axol1tl_top` runs the whole block end to end:

- It loads a random network.
- It sets thresholds at quantiles of the predicted scores, so every seed both fires and
  stays quiet.
- It streams 300 events with random gaps. Each must arrive exactly two clocks after it
  entered.
- It reprograms the thresholds mid-run.
- It checks every rate window.

The network is random, not trained. What the tests establish is that the arithmetic is the
arithmetic described above. They say nothing about physics performance.

To run one with Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/axo_pkg.sv rtl/dense_layer.sv rtl/axo_encoder.sv rtl/anomaly_score.sv \
  rtl/seed_thresholds.sv rtl/seed_rate_monitor.sv rtl/axol1tl_top.sv \
  tb/axo_ref_pkg.sv tb/tb_axol1tl_top.sv --top-module tb_axol1tl_top -o sim
./obj_dir/sim
```

For another testbench, swap the last file and the `--top-module`. A module testbench only
needs `axo_pkg.sv`, the module and the modules below it. `axo_ref_pkg.sv` is needed by
`tb_axo_encoder`, `tb_axol1tl_top` and `tb_axol1tl_full`. Every testbench finishes in well
under a second.

## Changing the design

- **Different network shape:** change `H1`, `H2` and `N_LATENT` in `axo_pkg`. The
  configuration index of a layer is 12 bits, so a layer can hold at most 4,096 weights plus
  biases; an elaboration-time assertion in `dense_layer` checks this. The address map
  above shifts with the sizes.
- **Different word widths:** change `IN_W`, `W_W`, `W_FRAC`, `B_W` and `ACT_W` in
  `axo_pkg`. `SCORE_W` follows from `ACT_W`.
- **Different object multiplicities:** change `N_JET`, `N_EG` and `N_MU`. The input vector
  and the first layer resize with them.
- **Different monitoring window:** set the `RATE_WINDOW` parameter of `axol1tl_top`.
