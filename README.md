# A neural-field engine on resistive-memory crossbars

A neural field stores a signal as a small neural network rather than as
samples. Examples are a CT volume, or a 3D scene seen from any angle. You
query the network at a coordinate and it returns the value there, such as
an attenuation, or a density and a colour. These networks are small (10⁴–10⁵
weights) but are evaluated millions of times per image. That makes them a
good fit for analog in-memory computing: the weights stay in a resistive
crossbar, and a whole matrix–vector product happens in one step through
Ohm's and Kirchhoff's laws.

The difficulty is that a resistive cell cannot be written precisely. After
a set pulse its conductance lands anywhere in a Gaussian of about ±19 %
(1 σ). This design gets usable precision out of such cells in three ways:

* **Gaussian encoding costs nothing.** The Gaussian-encoder matrix is the
  write noise itself. A crossbar region is formed at random, and its
  conductances *are* the random projection matrix B.
* **Each weight is spread over several binary cells.** Hardware-aware
  quantization (HAQ) picks each cell's state *after* measuring what the
  earlier cells actually became. Each cell therefore corrects the error of
  the cells before it.
* **The cells are recombined in the current domain.** A chain of current
  mirrors (the VCMAC) weights bit i by sᶦ. One ADC conversion then yields
  the whole multi-bit dot product.

The RTL here implements that system:
* a Gaussian encoder;
* an MLP processing engine with the HAQ programming loop and the VCMAC;
* the digital activation and volume-rendering units;
* a small sequencer that runs CT, NeRF and dynamic-NeRF networks as
  programs of the same hardware.

The crossbar, the ADC and the VCMAC are analog parts. They appear as
behavioural models (see *What is modelled*).

## The signal path for one query point

```
 host ──► scratchpad (1024 x 16 bit) ◄──────────────────────────────┐
            │ x                                                      │
            ▼                                                        │
  ┌─ Gaussian encoder ─────────────────────────────┐                 │
  │ BL drivers ► random crossbar ► SL ► ADC ► CORDIC├─► cos, sin ───►┤
  └─────────────────────────────────────────────────┘                │
  ┌─ MLP processing engine ─────────────────────────────────────┐    │
  │ BL drivers ► HAQ-programmed crossbar ► VCMAC ► ADC           │    │
  │            ► x (1/s)^(n-1) x scale ► activation unit ────────┼───►┤
  └──────────────────────────────────────────────────────────────┘   │
  vector add (x + dx) ───────────────────────────────────────────────►┤
  render unit ◄── sigma, rgb, delta ──────────────────────────────────┘
        └──► pixel colour, transmittance
```

All vectors live in one scratchpad (`act_sram`). Each unit reads its input
vector from a scratchpad address and writes its result to another.
Concatenation is therefore free: two results written next to each other
*are* the concatenated vector. Skip connections, `[cos, sin, x]`, and
`[feature, γ(d)]` all use this.

## Storing a weight in noisy cells: hardware-aware quantization

`haq_programmer` handles one weight at a time. The target `w_tar` is
already scaled to [−1, 1]. The weight is stored in `nbits` cells of one
row, in adjacent columns, bit[0] first. With a universal bias at half the
mean low-resistance conductance, cell i contributes bᵢ = 2gᵢ − 1, which is
close to +1 when set and close to −1 when reset. The stored value is

    w = Σᵢ bᵢ · (1/s)ⁱ ,   i = 0 … nbits−1

The loop is:

```
w_pro = 0, coef = 1
for i in 0 .. nbits-1:
    if (w_tar - w_pro) >= 0: SET cell i     else: RESET cell i
    g_i = READ cell i                       (the conductance it really got)
    w_pro += (2 g_i - 1) * coef
    coef  *= 1/s
```

A plain quantizer would compute all bits first and write them blind. This
loop instead reads the real conductance and chooses the next bit from the
*remaining* error. A cell that came out 30 % too strong is absorbed by the
next cells, which see the overshoot and reset instead of set. The residual
error is bounded by what the later cells can still reach, about
(1/s)^(nbits−1) in the normal case.

When the noise is very large, an early cell can land so far out that the
later cells cannot catch up. Misses like that are rare but real. In a
typical run of the CT network's 15,200 weights at 14 bits and s = 1.5, the
RMS error was 0.003 to 0.007 per layer, and about 5 of the 13,100 weights in
the biggest layer were off by more than 0.05. The testbenches therefore
check the error statistically (RMS and outlier fraction), not per weight.

Why s < 2? With s = 2, bit values halve exactly, as in binary, so there is
no redundancy and no room to correct. With s < 2, the bits overlap, and
that overlap is the correction range. Noisier cells call for a smaller s.

Details of this implementation:
* Arithmetic is Q.14.
* 1/s is rounded to Q2.14.
* A tie (remaining error exactly 0) counts as "set".
* The first cell is set for a non-negative target.

The published description says "set when the programmed value is below the
target", but its text and its flowchart write the difference with opposite
signs. This design follows the meaning, which both agree on.

Interface:
* A valid/ready handshake takes the weight, its row, its first column, its
  bit count and the mirror switch code.
* The module drives the crossbar's cell-command port with two commands per
  bit, program then read.
* `res_valid` returns the value the cells now hold (`res_w_pro`) and the
  chosen pattern (`res_bits`).
* Each bit takes about PROG_LAT + READ_LAT + 3 clocks, roughly 9 with the
  default latencies.

## Reading a weight back: the VCMAC and the digital rescale

In a matrix–vector product, each bit column's source line carries
Iᵢ = Σ_rows x · bᵢ / 2 (the /2 comes from the bias at half scale).

The VCMAC (`vcmac`) walks a weight's nbits lines starting at bit[0], and
multiplies the running current by s before adding the next line:

    acc = s · acc + Iᵢ      →      I_out = Σᵢ Iᵢ · s^(n−1−i)

That is the dot product multiplied by s^(n−1). The PE controller undoes the
factor digitally:

    y = act( 2 · code · LSB · (1/s)^(n−1) · scale )

The switch code {C4, C3, C2, C1} selects the mirror bank. There is a
unity mirror plus mirrors of 0.8, 0.4, 0.2 and 0.1, so

    s = 1 + 0.8·C4 + 0.4·C3 + 0.2·C2 + 0.1·C1     (1.0 … 2.5)

For example, `4'b0101` gives s = 1.5, the value used for the CT network.

Fixed point in this path (`pe_controller`):
* (1/s)^(n−1) is computed once per layer by repeated multiplication. The
  product is kept in Q8.24, because fifteen truncating multiplications in
  Q2.14 lose about 1 % at 12 bits.
* `scale` (Q3.12) maps the [−1, 1] weight range back to the layer's real
  weights.
* `adc_shift` sets the ADC full scale. The code is sat(I ≫ adc_shift), so
  one LSB is 2^(adc_shift−20) of a unit current.

A weight needs only one ADC conversion per output, whatever its bit width.
The price is dynamic range: bit[0]'s current is amplified by s^(n−1)
(195× at 14 bits, s = 1.5), and `adc_shift` must keep the sum within 14
bits. `tb_ct_workload` counts conversions that hit full scale.

## Mapping a layer onto the array: row bands

A layer of in_dim inputs and out_dim outputs at nbits needs
out_dim · nbits columns. If that exceeds the array width, the layer
descriptor splits the outputs into *bands* of `outs_per_band` neurons.
Band b uses rows `row_base + b·in_dim …` and the same columns:

    neuron j:  rows  row_base + (j / opb)·in_dim + k     (k = input index)
               cols  col_base + (j % opb)·nbits + i      (i = bit index)

For each band, the controller:
1. loads the inputs onto that band's bit lines;
2. runs one analog multiply over the window;
3. converts the band's outputs one by one: point the VCMAC at the neuron's
   columns, sample, rescale, activate, write.

Example: the CT input layer is 131 → 100 at 14 bits. That is 34 neurons per
band (476 columns), in 3 bands covering rows 0–392.

Layer time, in clocks:

    nbits + bands·(in_dim + VMM_LAT + 5) + out_dim·(3 + activation latency) + 1

The activation latency is 1 for none, ReLU and sigmoid, and 19 for sine.
`tb_pe_controller` checks this formula exactly.

## Gaussian encoder: a random matrix for free

Fourier-feature encoding lifts a coordinate x to [cos 2πBx, sin 2πBx]. B is
Gaussian, which lets a small MLP learn high-frequency detail.

Here B is never stored. The host forms a region of the encoder's crossbar
(`ge_cmd_*`), and each cell's conductance lands at random around the mean.
With the universal bias at the mean (1.0), column m carries
Σ_r x_r·(g_rm − 1), a zero-mean Gaussian projection. The configuration's
`scale` sets its spread σ.

For each column, `ge_controller`:
1. samples the ADC;
2. forms the phase (code · scale, in turns, 16 bits per turn, wrapping for
   free);
3. runs the iterative CORDIC (`cordic`: 16 micro-rotations, quarter-turn
   folding, Q3.12 outputs);
4. writes cos to `dst + m` and sin to `dst + enc_dim + m`.

With `append_raw`, the raw inputs follow. This gives the CT network's
64 + 64 + 3 = 131-wide input vector.

One pass takes about 2·in_dim + VMM_LAT + enc_dim·(ITER + 6) clocks.

## The sequencer: one engine, several kinds of network

`nf_top` holds three host-written tables:
* up to 4 encoder configurations (`ge_cfg_t`);
* up to 32 layer descriptors (`layer_desc_t`);
* a program of up to 64 operations (`op_t`).

`start` runs the program once, for one query point:

| op | action |
|---|---|
| `OP_ENCODE idx` | Gaussian-encoder pass with configuration idx |
| `OP_LAYER idx`  | one layer on the processing engine |
| `OP_ADD a,b,len`| sp[a+k] += sp[b+k] (saturating), used for x + Δx |
| `OP_RENDER a,b,delta` | feed σ = sp[a], rgb = sp[b..b+2] and the step to the render unit, with the `sample_first` / `sample_last` flags given at `start` |
| `OP_END`        | pulse `done` |

The three applications are three programs:
* **CT:** encode x → layers → read the attenuation value from the
  scratchpad.
* **NeRF:** encode x and d → hidden layers (the skip connection is a
  destination address placed just before γ(x)) → density layer and feature
  layer → colour layer on [feature, γ(d)] → render.
* **Dynamic NeRF:** encode (x, t) → deformation layers → `OP_ADD` → the
  NeRF program on x + Δx.

A low-rank layer W ≈ U·V is simply two descriptors, the first with no
activation.

While `busy` is low, the host owns the scratchpad. It writes coordinates
and reads results through the `h_sp_*` port, with a read latency of one
clock.

## Activation and rendering

`activation_unit` implements four functions:
* none;
* ReLU;
* sigmoid, as a piecewise-linear approximation with break points at 1,
  2.375 and 5 and slopes ¼, ⅛ and 1/32 (error ≤ 0.02);
* sine of x in radians, computed by its own CORDIC with phase x/2π.

The first three take one clock and sine takes ITER + 3.

`render_unit` accumulates the volume-rendering quadrature along a ray:

    C = Σᵢ Tᵢ (1 − e^(−σᵢδᵢ)) cᵢ,     Tᵢ₊₁ = Tᵢ e^(−σᵢδᵢ)

e^(−x) is computed as 2^(−x·log₂e):
* a right shift handles the integer part of the exponent;
* a 256-entry table of 2^(−f/256), computed at elaboration, handles the
  fraction, with linear interpolation between entries.

The interpolation matters. A ray has 64 thin samples, and flooring each
exponent to 1/256 would under-count the total absorption by several
percent.

T is kept in Q1.16. Negative densities count as zero. The pixel appears one
clock after the last sample.

## Number formats

| quantity | format |
|---|---|
| activations, coordinates, scales | signed Q3.12 (16 bit) |
| cell conductance | unsigned Q2.8, 1.0 = mean set conductance |
| source-line / VCMAC current | signed 48 bit, 20 fractional bits |
| ADC code | signed 14 bit |
| HAQ weights | Q1.14 target, Q2.14 result |
| phase | 16 bit unsigned, 2¹⁶ = one turn |
| transmittance | Q1.16 |

## What is modelled rather than designed

These three modules are behavioural models of analog parts. They are
written to simulate, not to synthesise, and they use `$urandom` for write
noise.

* `rram_macro`: the 512 × 512 1T1R array with its word-, bit- and
  source-line drivers.
  * Form and set draw N(1.0, 0.187²), the measured 5.46 µS spread around
    29.22 µS. The Gaussian is the sum of twelve uniform draws.
  * Reset gives ≈ 0.
  * A multiply over any row/column window returns Σ bl·(g − g_bias) per
    column after `VMM_LAT` clocks.
  * Testbenches read the conductance array `g` hierarchically to compute
    their references.
* `vcmac`: the current-mirror chain, as exact arithmetic.
* `adc`: a 14-bit conversion. The trans-impedance gain is represented by a
  programmable shift.

Everything else is synthesizable RTL:
* `cordic`
* `activation_unit`
* `render_unit`
* `haq_programmer`
* `ge_controller`
* `pe_controller`
* `act_sram`
* the sequencer in `nf_top`

Synthesis of `nf_top` as a whole stops at the crossbar model's random-number
calls. The digital modules synthesise on their own.

## Where this design departs from the published system

* **Two crossbars.** The chip has one 512 × 512 macro. Here the encoder
  and the processing engine each get their own instance, which keeps the
  two controllers independent.
* **The host is outside.** The published system uses the processor of a
  ZYNQ SoC to move data and sequence work. Here that job belongs to the
  host ports and the small sequencer. The op format, tables and scratchpad
  are this design's own.
* **Board parts are abstracted.** The 16-bit DAC, the analog
  multiplexers, the shift registers and the trans-impedance amplifiers are
  not modelled. Inputs go to the bit lines as numbers.
* **No 64-input limit.** The board drives 64 bit lines at a time. The
  model drives a whole window at once, so one band's product is a single
  step here, where the board needs several.
* **Idealised analog parts.**
  * Cell read noise, the VCMAC's ~1 % mirror error and its 0.1 input
    current scaling are not modelled. The scaling is a constant that the
    ADC full scale absorbs.
  * How the universal bias is applied in the circuit is not described, so
    the model subtracts `g_bias` in the multiply.
* **Range of s.** The source gives two ranges for the amplification ratio,
  1.1–2.5 from the switch ratios and 1.1–2.0 as measured. This design
  allows everything the switches give (1.0–2.5).
* **Own choices where the source is silent.** These include:
  * the fixed-point formats and the sigmoid approximation;
  * the CORDIC size;
  * the band mapping of layers;
  * all latencies and handshakes;
  * conversion of one output at a time with one ADC per engine.
* **Not hardware.** The training-side methods that choose network sizes
  and bit widths are not hardware and are not part of this design. They
  are low-rank decomposition, structured pruning and the hardware-aware
  hyper-parameter search.

## Capacity

| network | cells needed | fits 512 × 512 (262,144 cells)? |
|---|---|---|
| CT: encoder 3→64, 131→100 (14 b), rank-10 hidden 100→10→100 (14 b), 100→1 (12 b), s = 1.5 | 212,600 | yes, placed as in `tb_ct_workload` |
| NeRF: 8 low-rank layers of width 26, rank 3, 1.05·10⁴ weights | ≈147,000 at 14 bits (bit width assumed) | by cell count; the exact layer shapes are not given |
| Dynamic NeRF: canonical NeRF + 4-layer deformation net | unknown (deformation width not given) | not determined |

Times with the defaults, as measured in simulation:
* a CT voxel takes 6,654 clocks;
* a NeRF sample takes 2,989 clocks with the sizes in `tb_nerf_workload`;
* a dynamic-NeRF sample takes 4,126 clocks.

Most of that time is one ADC conversion and one activation per output
neuron. The sine's 19-clock CORDIC dominates the CT network.

## Files

The `rtl/` folder holds one module or package per file:

| file | contents |
|---|---|
| `nf_pkg.sv` | sizes, formats, descriptor structs, helpers |
| `rram_macro.sv` | crossbar model |
| `vcmac.sv` | current-mirror chain model |
| `adc.sv` | ADC model |
| `haq_programmer.sv` | HAQ programming loop |
| `pe_controller.sv` | processing-engine sequencer |
| `ge_controller.sv` | encoder sequencer |
| `cordic.sv` | iterative CORDIC |
| `activation_unit.sv` | activation functions |
| `render_unit.sv` | volume rendering |
| `act_sram.sv` | scratchpad |
| `nf_top.sv` | top level and op sequencer |

The `tb/` folder holds one self-checking testbench per module, named
`tb_<module>.sv`, plus `tb_ct_workload.sv` and `tb_nerf_workload.sv`.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/nf_pkg.sv \
          tb/tb_nf_top.sv --top-module tb_nf_top
./obj_dir/Vtb_nf_top +verilator+rand+reset+2
```

Replace `tb_nf_top` with any other testbench. Each one prints
`TB_RESULT checks=N failures=M`. Each has a watchdog and compares the
outputs against an independent real-number reference.

* **Unit testbenches:**
  * The CORDIC and activation unit are checked over their input range.
  * The crossbar model is checked for write-noise statistics and exact
    products.
  * The VCMAC is checked for all switch codes.
  * The HAQ loop is checked for every bit decision, and for accuracy by
    RMS error and outlier count.
  * The controllers are checked for their outputs and exact cycle counts.
* **`tb_nf_top`:** runs the engine at full size on a miniature
  dynamic-scene NeRF over a four-sample ray. It checks every intermediate
  vector and the rendered pixel. It also counts each mechanism: forming,
  HAQ writes, encoder passes, multi-band layers, each activation function,
  the vector add, render samples and pixels. It takes about 10 s to build
  and run.
* **`tb_ct_workload`:** writes the full CT network (212,600 cells) and
  evaluates four voxels. It compares them with the same network computed
  from exact weights. In a typical run they agree within about 0.02, and
  up to about 0.08 across random seeds; the check uses a loose bound of 0.2.
* **`tb_nerf_workload`:** builds the NeRF structure (eight rank-3
  low-rank layers of width 26, skip connection after the fifth, density,
  feature and colour branch) plus a 4-layer deformation net. It renders one
  64-sample ray with the static program and one with the dynamic program,
  and checks every stage of every sample and both pixels (about 53,000
  checks).
