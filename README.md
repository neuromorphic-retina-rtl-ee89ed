# A streaming digital retina

This is a synthesizable model of the primate retina that turns a luminance
video into ganglion-cell spikes. It covers the chain from photoreceptors to
spiking output:

* a centre–surround outer plexiform layer (OPL) with luminance adaptation,
* bipolar cells with contrast gain control,
* the rectified excitatory current into the ganglion cells, with an ON or an
  OFF polarity,
* one leaky integrate-and-fire (LIF) neuron per pixel.

The key idea is that every stage of the model is either a **spatial** filter
or a **per-pixel temporal** filter. A video frame is one time step of the
model. So the whole retina can run as one pixel pipeline:

* pixels enter in raster order, one per clock;
* spatial filters use a small register window plus a few line buffers;
* each temporal filter keeps one state value per pixel in a frame memory;
* every layer does its arithmetic on the pixel as it passes.

No frame is ever buffered whole. A 128×128 frame takes 16384 clocks. At
200 frames/s the design needs only a 3.3 MHz pixel clock.

Every model parameter is a run-time input: filter coefficients, kernels,
weights, nonlinearity constants, the neuron threshold and the refractory
length. The same hardware can therefore model ON or OFF cells, and phasic
(transient) or tonic (sustained) cells, without rebuilding.

## Model and its discrete form

Symbols:

* `*` is convolution.
* `G_x` are Gaussian spatial kernels.
* `E_τ` is a first-order temporal low-pass.
* `T_ω,τ = δ − ω·E_τ` is a partial temporal high-pass.

| Layer | Continuous model | Per-frame computation in the hardware |
|---|---|---|
| OPL centre | `C = G_C * T_ω,τ * E_τC * L` | 3×3 convolution (K1), then IIR low-pass (a1, b1), then IIR high-pass (a2, b2) |
| OPL surround | `S = G_S * E_τS * C` | 5×5 convolution (K2) of C, then IIR low-pass (a3, b3) |
| OPL output | `I_OPL = λ_OPL (C − ω_OPL S)` | one multiply-subtract-multiply |
| Bipolar | `dV/dt = I_OPL − g_A V`, `g_A = G_A * E_A * (g0_A + λ_A V²)` | `g_A = g0_A + E_A_prev`<br>`att = exp(−step·g_A)`<br>`E∞ = input_amp·I_OPL`<br>`V = (V_prev − E∞)·att + E∞`<br>`E_A' = V_prev²·b4 − E_A_prev·a4`<br>`E_A = K3 * E_A'` (5×5) |
| Ganglion current | `I_Gang = N(ξ · T_G * V_Bip)` | IIR high-pass (a5, b5), times ξ = ±1, then `N(x)`:<br>`i0 + λ_G(x − v0)` for `x > v0`<br>`i0² / (i0 − λ_G(x − v0))` otherwise |
| Spiking | `dV_m/dt = I_Gang − g_L V_m` | `V_m ← V_m + (I_Gang − g_L·V_m)·tau`<br>held at 0 while refractory<br>spike when `V_m > V_th`<br>after a spike, `V_m ← 0` and the refractory counter is loaded |

The IIR filters are first-order:

* low-pass: `Y(n) = b·X(n) − a·Y(n−1)`, with `a = −exp(−dt/τ)` and
  `b = 1 + a` (unit DC gain);
* high-pass: `out = X − Z`, with `Z(n) = b·X(n) − a·Z(n−1)` and
  `b = ω(1 + a)`.

The weight ω is folded into `b`:

* ω = 1 removes the sustained part of the signal completely, which gives a
  phasic cell.
* ω < 1 keeps a fraction 1 − ω of it, which gives a tonic cell.

`n` counts frames. The state `Y(n−1)` is the same pixel's value in the
previous frame.

## Number format

Every datapath signal, coefficient, kernel tap and threshold is a 19-bit
two's-complement number with 10 fractional bits (`retina_pkg::fx_t`). That
gives a range of −256 to +255.999 in steps of 1/1024.

* Products are formed at full width and shifted right by 10, which truncates
  toward −∞.
* Every stage saturates rather than wraps.
* The time step is `dt = 1/1024 s`, about 1 ms. With τ = 10/1024 s, `dt/τ` is
  exactly 0.1.
* The 8-bit luminance enters as an integer (`pix·1024`).

The 19-bit width and the 10 fractional bits are consistent with the
quantised parameter values reported for the original FPGA build:

* 0.008 → 0.0078
* 0.1 → 0.0996
* 0.05 → 0.0498
* 10 ms → 9.8 ms

## The window filters (`conv2d`)

This is the part that takes the most care. One module serves all three
spatial filters:

* `N = 3` for the centre kernel G_C;
* `N = 5` for the surround kernel G_S;
* `N = 5` for the amacrine kernel G_A.

**Register bank.** The N×N window is held in registers `win[k][j]`:

* row `k = 0` is the oldest image row and `k = N−1` is the current row;
* column `j = 0` is the newest pixel.

On each accepted pixel every row shifts by one column. The new column is
loaded as follows:

* the bottom row takes the incoming pixel;
* rows 0 … N−2 take the outputs of the N−1 line RAMs, which hold the previous
  N−1 image rows.

The pixel that falls out of the last register of the bottom row is written
into a line RAM. At that point it is N columns behind the input.

**Row rotation.** Image row `r` is stored in RAM `r mod (N−1)`:

* For 3×3 the two RAMs alternate between even and odd rows (ping-pong).
* For 5×5 the four RAMs hold rows 0,4,8,… / 1,5,9,… / 2,6,10,… / 3,7,11,….

A ring index selects which RAM feeds which window row. It plays the role of
the 4:1 multiplexers in front of the first register of each window row in
the 5×5 bank. The RAM read for the next column is issued one clock early.
This lets an ordinary block RAM with a registered output be used.

**Zero padding and lag.** The window centred on pixel `(r, c)` is complete
only when pixel `(r+P, c+P)` arrives, where `P = N/2`. So the output stream
lags the input by `P·W + P` pixels. The stream does not stop between frames:

* the last P rows of a frame are pushed out by the first pixels of the next
  frame;
* no blanking interval is needed.

Row and column counters track the centre of the current window. A tap whose
row or column lies outside the frame is masked to zero at the adder input,
which gives zero padding at all four borders. Without these masks, the
window would mix in the wrapped-around end of the previous row or the rows
of the previous frame.

**Sample width.** Parameters set the stored sample format: width `DW`,
`IN_FRAC` fractional bits, signed or unsigned. The 5×5 filters use the
19-bit datapath format. The 3×3 centre filter keeps raw unsigned 8-bit
luminance, so its line RAMs are 128×8 bits. Its products come out directly in
the datapath format.

**Adder tree.** The unit is a single combinational sum of N² products,
followed by one output register (with a 2⁻¹⁰ rescale and saturation). The
module also outputs the unfiltered centre pixel `out_center`, aligned with
`out_data`. The OPL uses it to line up C with the later S.

Latency: `out_valid` for pixel `(0,0)` comes two clocks after the clock that
presents pixel `P·W + P`.

## Per-pixel state (`pixel_state_mem`)

Each temporal filter and each neuron keeps one word per pixel in a frame
memory (`sdp_ram`: one write port, one synchronous read port).

* A read counter walks the frame in step with the input. It prefetches the
  next pixel's state, so the current pixel's state is ready in the same
  clock as the pixel itself.
* A separate write counter stores results in raster order.
* During the first frame after reset the state reads as zero. Every filter
  therefore starts at rest without the RAM being cleared.

Most users write back in place: the write happens in the same clock as the
read. The bipolar layer is the exception. Its `E_A` state passes through the
5×5 G_A window before it is stored, so it is written two rows and two pixels
behind the read. It is still complete before the same pixel is read in the
next frame.

## The layers

**`opl_layer`** chains `conv2d(3×3) → iir_lpf → iir_hpf` to form C, then
`conv2d(5×5) → iir_lpf` to form S. C is taken from the centre tap of the 5×5
window, so it is aligned with S. I_OPL is then `λ(C − ω·S)`.

Because S is a blurred and low-passed copy of C, it arrives later than C.
This makes the OPL a spatio-temporal band-pass filter: an edge detector and a
motion detector at once.

**`bipolar_cgc`** follows the bipolar update shown in the table above:

* It holds V_Bip and E_A in two frame memories.
* It computes the exact exponential step with `exp(−x)`, built from a
  table for the integer part of x and a 4th-order series for the fraction.
  The error is below 0.7 %.
* It streams `E_A'` through its own 5×5 window filter.

Strong local contrast raises `g_A`. A larger `g_A` both attenuates and
speeds up the bipolar response. The feedback strength λ_A is carried in
`b4 = λ_A(1 + a4)`. The primate set has λ_A = 0, which leaves the loop open.

**`ganglion_current`** works in three steps:

1. A high-pass T_G with its own frame memory.
2. The sign ξ, selected by the configuration bit `xi_on`.
3. The rectifying nonlinearity N.

Above `v0_G`, N is linear with slope λ_G. Below it, N decays smoothly toward
zero. The curve is continuous, and so is its slope. The lower branch uses a
one-cycle combinational divider.

**`lif_neuron`** follows the discrete LIF update from the table. The
membrane potential and the refractory counter of each pixel share one
27-bit memory word.

A spike loads the counter with `refr`. The state update is:

* `rt ← rt − 1`, and `V_m` is held at zero while the result is ≥ 1;
* after a spike, `V_m ← 0` and `rt ← refr`.

So the neuron stays silent for `refr − 1` frames after the spike.

**`retina_top`** connects the four layers and brings every intermediate
stream out for observation.

## Configuration (`retina_pkg::retina_cfg_t`)

`RETINA_CFG_DEFAULT` is the primate parameter set for a 1 ms step:

| Field | Default | Meaning |
|---|---|---|
| `k1` | 3×3 Gaussian, σ = 0.5 px | G_C (σ_C = 0.05°) |
| `k2` | 5×5 Gaussian, σ = 1.5 px | G_S (σ_S = 0.15°) |
| `k3` | σ = 0.5 px Gaussian inside 5×5 | G_A (σ_A = 0.05°) |
| `a1, b1` / `a3, b3` | −927, 97 | τ_C = τ_S = 10 ms |
| `a2, b2` | −927, 78 | τ_U = 10 ms, ω = 0.8 |
| `lambda_opl`, `omega_opl` | 1024, 512 | λ_OPL = 1, ω_OPL = 0.5 |
| `a4, b4` | −838, 0 | τ_A = 5 ms, λ_A = 0 |
| `g0_a` | 51200 | g0_A = 50 |
| `step`, `input_amp` | 1, 1024 | step = 1/1024, amplification 1 |
| `a5, b5` | −974, 50 | τ_G = 20 ms, ω_G = 1 (phasic) |
| `xi_on` | 1 | ON cell |
| `lambda_g`, `i0_g`, `v0_g` | 5120, 8, 0 | λ_G = 5, i0_G = 0.0078, v0_G = 0 |
| `g_l`, `tau`, `v_th` | 102, 1024, 1024 | g_L = 0.0996, one step, threshold 1 |
| `refr` | 2 | refractory length in frames |

Kernel taps are normalised so that they sum to exactly 1024. The kernels
assume 10 pixels per degree of visual angle, so you should recompute them for
another optics. The coefficients follow these rules:

* low-pass: `a = −round(1024·e^(−dt/τ))` and `b = 1024 + a`;
* high-pass: `b = ω(1024 + a)`.

Two examples:

* For a tonic ganglion cell, halve `b5`. The tonic/phasic testbench uses
  ω_G = 0.5, which is `b5 = 25`.
* For an OFF cell, clear `xi_on`.

**Changing parameters.** A change of `cfg` takes effect in each stage at
that stage's next pixel. To switch cleanly, change it between frames after
the pipeline has drained, or accept one mixed frame.

## Interface and timing of `retina_top`

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `cfg` | in | `retina_cfg_t` | all run-time parameters |
| `pix_valid`, `pix_data` | in | 1, 8 | luminance, raster order, at most one per clock, frames back to back |
| `opl_valid`, `opl_center`, `opl_surround`, `i_opl` | out | 1, 19, 19, 19 | OPL stream: C, S, I_OPL |
| `bip_valid`, `v_bip`, `g_a` | out | 1, 19, 19 | bipolar stream |
| `gang_valid`, `i_gang` | out | 1, 19 | ganglion current stream |
| `spk_valid`, `spk_sof`, `spike`, `vm` | out | 1, 1, 1, 19 | spike bit and membrane potential per pixel; `spk_sof` marks pixel (0,0) |

Input and output rules:

* The first pixel after reset is pixel (0,0).
* There is no back-pressure: the input may pause (with `pix_valid` low) at
  any point, and the outputs pause with it.

Latency:

* The three spatial windows delay the stream by 3(W+1) pixels, i.e. 387
  pixels at W = 128.
* With continuous input, the spike of pixel (0,0) appears 12 clocks after
  input pixel 3(W+1). That is 399 clocks in total at W = 128. The original
  FPGA build reports 413 clocks; the difference is only in pipeline
  register depth.

Storage at W = H = 128:

* seven 16384-word frame memories: six of 19 bits and one of 27 bits, about
  2.3 Mbit;
* ten 128-word line RAMs: two of 8 bits (3×3) and eight of 19 bits (5×5).

Each layer contains the following:

* **OPL:** two line RAMs (3×3 window) and four line RAMs (5×5 window); three
  frame memories (LPF, HPF, LPF).
* **Bipolar:** four line RAMs (5×5 window); two frame memories (V_Bip, E_A).
* **Ganglion:** one frame memory (T_G).
* **LIF:** one frame memory.

Arithmetic:

* convolutions: 9 + 25 + 25 multipliers;
* other products: about 20 multipliers;
* one divider.

The frame size is set by the parameters `W` and `H` of `retina_top`. A
512×512 stream at 200 frames/s needs 52 Mpixel/s, and the pipeline handles
that rate at one pixel per clock. It does need `W = H = 512`, which makes
each frame memory 16 times larger.

## Where this design departs from the original description

* **OPL output.** The OPL output uses `λ_OPL(C − ω_OPL·S)`. The layer's
  step-by-step description writes plain `C − S`, which is the special case
  λ = ω = 1. With the primate ω_OPL = 0.5 the results differ.
* **Line RAM width of the 5×5 filters.** Their four line RAMs each store the
  19-bit datapath value. The original gives 128×8 bits only for the 3×3
  filter on raw luminance, which is what this design uses there.
* **Refractory counter.** It is loaded with `refr` on a spike. The original
  step list counts it down but never sets it.
* **Nonlinearity branch.** The branch of N is chosen on `x > v0_G`. The
  original step list tests `x > 0`. Both agree for v0_G = 0.
* **Settings the original does not give.** These are this design's choices:
  * the high-pass weights ω for the photoreceptor (0.8) and for T_G (1);
  * the pixel pitch (10 px/degree);
  * `input_amp`;
  * the refractory length;
  * the reset behaviour;
  * the absence of back-pressure.
* **Fixed-point details.** Products truncate rather than round, and `exp`
  uses a table plus a series. This design's results agree bit for bit with
  the reference model in `tb/`, but they are not bit-compatible with any
  other fixed-point implementation.
* **Not included.** The pixel source, the host interface and any
  configuration bus. `cfg` is a plain parallel input.

## Verification

Each testbench checks itself, prints `TB_RESULT checks=… failures=…`, and
stops with a watchdog if it hangs. `tb/retina_ref_pkg.sv` is an independent,
frame-at-a-time reference. It has no line buffers, no prefetch and no lagged
write-back, and it uses the same integer arithmetic as the hardware. The
layer and top-level tests compare every output value with it exactly.

| Testbench | What it checks |
|---|---|
| `tb_conv2d` | 3×3 and 5×5 against direct convolution, random kernels, idle gaps, border padding, saturation, two-clock latency |
| `tb_iir_lpf`, `tb_iir_hpf` | step and random-input response over 40 frames, coefficient change, idle gaps, one-clock latency |
| `tb_opl_layer` | C, S and I_OPL against the reference, latency |
| `tb_bipolar_cgc` | V_Bip and g_A with contrast gain feedback enabled |
| `tb_ganglion_current` | both nonlinearity branches, ON and OFF |
| `tb_lif_neuron` | integration, threshold, reset, refractory hold |
| `tb_retina_top` | 16×12, 80 frames of a chirp-like stimulus as an ON cell (with idle gaps) and an OFF cell. It counts ON/OFF spikes, refractory steps, both nonlinearity branches, raised g_A and frame overlap, and checks the 12-clock latency and that frames leave W·H clocks apart |
| `tb_retina_pulse` | photoreceptor impulse response (rise, then undershoot); phasic vs tonic response to a 200-frame luminance pulse |
| `tb_retina_full` | full 128×128 design with default module parameters, 40 frames ON and OFF, every output value compared, 16384-clock frame period and 399-clock latency checked; runs in a few seconds |

Simulate any of them with Verilator, for example:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb rtl/retina_pkg.sv tb/retina_ref_pkg.sv \
  rtl/sdp_ram.sv rtl/pixel_state_mem.sv rtl/conv2d.sv rtl/iir_lpf.sv \
  rtl/iir_hpf.sv rtl/opl_layer.sv rtl/bipolar_cgc.sv rtl/ganglion_current.sv \
  rtl/lif_neuron.sv rtl/retina_top.sv tb/tb_retina_top.sv --top-module tb_retina_top
./obj_dir/Vtb_retina_top
```

For block tests, list only the files the block needs. `-Wno-fatal` is
needed because Verilator's lint reports width and unused-bit warnings. These
come from the ascending kernel arrays and the shared configuration struct,
of which each layer reads only its own fields.

The small top-level tests change a few run-time settings so that every
mechanism shows up within a few dozen small frames:

* contrast-gain feedback on (`b4`);
* a larger `i0_g`;
* a faster T_G.

All module parameters stay at their defaults in `tb_retina_full`.
