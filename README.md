# A neural-network level-1 trigger for cryogenic phonon detectors

This is the RTL of a real-time trigger for a dark-matter detector read out by
twelve phonon sensors. The classic level-1 trigger sums the phonon channels in a
few fixed ways, runs each sum through an optimal FIR filter and fires when a
filtered trace crosses a threshold. Low-energy pulses are lost in the noise that
way. Low-frequency correlated noise is the worst of it. This design adds a
small neural network between the FIR filters and the threshold stage. The
network sees 26 differently filtered views of the same event at once:
- the phonon total with two filters;
- every single channel with a fast-component filter;
- every single channel with a slow-component filter.

It produces one new trace in which pulses stand out better against the noise.
That trace replaces one of the 26 trigger paths. The existing threshold, peak
search and trigger logic then treat it like any other path, so the old
triggers keep working next to the new one.

All of it runs at 100 MHz on one trigger sample every 2560 clocks (about
39 kHz). The design leans on that headroom throughout. Every filter and every
layer is one multiplier (four in the LSTM) stepping through its weights, not a
parallel array.

## Signal chain

```
12 ADC streams ─► downsampler ─► 26 × (lincomb ─► fir_filter) ─► nn_module ─► 26 × (threshold_logic ─► peak_search) ─► trigger_logic
                                                                    ▲
config write port ─► config_regs ───────── coefficients, weights, masks, thresholds
```

| Stage | Module | What it does |
|---|---|---|
| Downsampling | `downsampler` | Averages each channel over 32 ADC samples (boxcar). One instance serves all paths. |
| Channel combination | `lincomb` (×26) | `Σ coef[c]·x[c] >>> 7` over 12 channels, with 8-bit signed coefficients. All 127 gives the phonon total; one 127 and the rest 0 selects a channel. |
| Optimal filter | `fir_filter` (×26) | 1024-tap FIR with 16-bit coefficients, a full-width accumulator, then a programmable right shift and saturation to 32 bits. |
| Network stage | `nn_module` | Described below. Replaces path `out_sel` with the network output. |
| Threshold | `threshold_logic` (×26) | Hysteresis: turns on at `≥ thr_on`, off at `< thr_off`. Marks the crossing sample. |
| Peak search | `peak_search` (×26) | A crossing opens a window of `win_len` samples. At the end it emits a primitive: {peak amplitude, peak time, threshold bit seen}. |
| Decision | `trigger_logic` | OR of the primitives on the paths in `or_mask`. Also an AND form, in which a primitive on path `and_lead` needs every path in `and_mask` to have been above threshold within its window. |
| Configuration | `config_regs` | Decodes one 20-bit-address, 32-bit-data write port. |

The intended setup of the 26 paths, done entirely through configuration:
- path 0: the phonon total with the optimal filter;
- path 1: the phonon total with a flattened optimal filter;
- paths 2–13: the single channels with fast-component filters;
- paths 14–25: the single channels with slow-component filters.

The network output overwrites path 2 (`out_sel = 2`, the reset value). A
detector with fewer channels simply leaves paths unused. It zeroes their
coefficients and clears their bits in the network input mask.

## The time budget

At 100 MHz and a 1.25 MHz ADC strobe, one trigger sample spans 32 ADC samples,
which is 2560 clocks. The stages use that budget as follows:

| Stage | Clocks per trigger sample | Formula |
|---|---|---|
| lincomb | 13 | N_CH + 1 |
| fir_filter | 1026 | TAPS + 2 |
| hidden dense (26→24) | 650 | N_OUT·(N_IN+1) + 2 |
| LSTM (24→12) | 447 | N_UNITS·(N_IN+N_UNITS+1) + 3 |
| output dense (12→1) | 15 | 1·(12+1) + 2 |
| nn_module total | 1114 (measured) | layers plus input and output registers |
| threshold / peak / trigger | 1 each | registered |

The FIR and network stages together need about 2150 clocks, which is under
2560. They also do not have to fit back to back. The network stage buffers its
input in a FIFO, so FIR filtering of sample n+1 overlaps the network's work on
sample n. The top-level testbench checks that every sample leaves the network
stage before the next one arrives.

The filters and layers accept no handshaking from downstream. A new input
that arrives while a filter is still busy is dropped. The FIFO `overflow`
flag reports the same situation at the network stage. At the real sample rate
none of this happens.

## The network stage (`nn_module`)

This is the part that needs the most explanation.

**Buffering.** Each filtered 26-path sample is pushed into `nn_fifo`, which
is 4 entries deep and 832 bits wide. The network reads the head of the FIFO
without removing it. The head is popped only when the network has produced
the output for it. The popped entry then leaves the stage with one path
replaced. The other 25 paths are therefore delayed by exactly the network's
latency and stay aligned with the network output.

**Input normalisation.** The FIR counts of path p become the Q16.16 value
`(x << 16) >>> in_shift[p]`, saturated to 32 bits. This is a power-of-two
scaling that brings the inputs to order one. A path whose bit is clear in the
26-bit `input_mask` is fed as 0.

**Layers.** All arithmetic is Q16.16 (32 bits, 16 fraction bits). Products
are floored (truncated toward −∞) back to Q16.16. Sums use a wide
accumulator, and the result is saturated to 32 bits once per neuron.
1. `nn_dense` 26→24 with ReLU.
2. `nn_lstm` 24→12. Each unit j computes four gate pre-activations:

   `z_g = b_g + W_g·x + U_g·h`, with g ∈ {i, f, c, o}

   and then

   ```
   i = σ(z_i)   f = σ(z_f)   u = relu(z_c)   o = σ(z_o)
   c' = f·c + i·u
   h' = o·relu(c')
   ```

   This is the Keras LSTM cell with ReLU where Keras would use tanh. The
   layer is stateful. It takes one time step per trigger sample, and h and c
   carry over from one sample to the next. Reset or `nn_state_clear` zeroes
   them.
3. `nn_dense` 12→1, linear.

**Sigmoid.** σ is the multiplier-free piecewise-linear approximation PLAN,
with error below 0.02. Let a = |x|:

| Range of a | f(a) |
|---|---|
| a ≥ 5 | 1 |
| 2.375 ≤ a < 5 | a/32 + 0.84375 |
| 1 ≤ a < 2.375 | a/8 + 0.625 |
| a < 1 | a/4 + 0.5 |

For negative x, σ(x) = 1 − f(a). Every slope is a shift. The two middle
segments do not quite meet at a = 2.375: there is a downward step of 1/256.

**LSTM schedule.** Four MACs work in parallel, one per gate, each with its
own weight RAM. For one unit they walk the 24 inputs, then the 12 previous
outputs, then the bias. The unit's cell update happens one clock after its
MACs finish, while the MACs are already on the next unit. New h values are
collected in a separate buffer, so every unit of a step sees the h of the
previous step.

**Output.** The scalar output y is turned back into FIR counts as
`(y << out_shift) >>> 16`, saturated (`nn_out`). It replaces path
`out_sel` in the popped FIFO entry. `out_sel` is 6 bits wide. Values of
26 and above replace nothing, which turns the network stage into a pure
delay.

## Fixed-point conventions

| Quantity | Format |
|---|---|
| ADC samples | 16-bit signed |
| lincomb output | 24-bit signed |
| FIR output and every trigger path sample | 32-bit signed ("FIR counts") |
| Thresholds | 32-bit signed, in the same units as the path they act on |
| Network weights and activations | Q16.16 |
| Timestamps | 32-bit count of trigger samples since reset |

A trigger primitive (`prim_t`) holds the peak amplitude, the sample time of
the peak and the threshold bit.

## Configuration register map

There is one write port, `cfg_we`/`cfg_addr[19:0]`/`cfg_wdata[31:0]`, with no
read-back. Bits [19:16] select the region.

| Region | Address fields | Target |
|---|---|---|
| 0 | `[7:0]` register | control registers, below |
| 1 | `[12:8]` path, `[3:0]` channel | lincomb coefficient (8-bit) |
| 2 | `[14:10]` path, `[9:0]` tap | FIR coefficient (16-bit). Tap k weights the sample k steps old. |
| 3 | `[15:14]` layer (0 hidden, 1 LSTM, 2 output), `[13:0]` index | network weight (Q16.16) |

Control registers (region 0):

| Address | Register | Reset value |
|---|---|---|
| 0x00 | network input mask (26 bits) | all ones |
| 0x01 | network output selector (6 bits) | 2 |
| 0x02 | network output left shift (5 bits) | 0 |
| 0x03 | FIR output right shift (5 bits) | 0 |
| 0x04 | trigger window length in samples (16 bits) | 16 |
| 0x05 | OR mask (26 bits) | 0 |
| 0x06 | AND mask (26 bits) | 0 |
| 0x07 | AND lead path (5 bits) | 0 |
| 0x20 + p | network input right shift of path p (5 bits) | 0 |
| 0x40 + p | activation threshold of path p | 0x7FFFFFFF |
| 0x60 + p | deactivation threshold of path p | 0x7FFFFFFF |

Writes to a path number above 25 are ignored.

Network weight indices within each layer:
- **Dense layers:** `W[n][k]` is at `n·N_IN + k`. Bias `b[n]` is at
  `N_IN·N_OUT + n`.
- **LSTM:** index = `{gate[1:0], j·(N_IN+N_UNITS+1) + t}`, with gate
  0 = i, 1 = f, 2 = c, 3 = o. For t < 24, t is the input weight. For
  t = 24 + m, it is the recurrent weight on h[m]. For t = 36, it is the bias.
  A Keras kernel, recurrent kernel and bias map onto this after splitting
  their columns in the order i, f, c, o.

Coefficient and weight memories are not reset. Load them before use. Changing
the input mask or output selector takes effect at the next sample the network
takes from its FIFO.

## Trigger decision details

- A threshold crossing opens a window on that path. The window includes the
  crossing sample and lasts `win_len` samples. Later crossings on the same path
  fall into the open window.
- At the end of the window the primitive is emitted one clock after the last
  sample. Its peak is the first maximum in the window.
- `trigger_logic` outputs one trigger per clock.
  - An OR hit takes precedence, and the lowest-numbered path wins.
  - The AND form records which paths had their threshold bit set during the
    lead path's open window. It fires when the lead path's primitive arrives
    and every path in `and_mask` was seen.
  - `trig_is_and` reports that the coincidence held on that clock, including
    when an OR hit fired at the same time.

## Where the design departs from, or goes beyond, the description it follows

Taken from the published design:
- 26 trigger paths over 12 channels;
- the three path types;
- 8-bit linear-combination coefficients, with 127 as unit weight;
- 1024-tap FIR filters with 16-bit coefficients;
- the network placed between the FIR and threshold stages;
- the 26-bit input mask and bit-shift normalisation;
- Dense 24 (ReLU) → LSTM 12 (ReLU) → Dense 1 (linear);
- Q16.16 weights;
- the FIFO that is read out when the network produces its output;
- the 6-bit output selector;
- activation and deactivation thresholds;
- per-crossing trigger windows that record the peak amplitude, peak time and
  threshold bit;
- Boolean combination of primitives.

Choices of this design, where the description is silent:
- Downsampling factor of 32, derived from a 1.25 MHz ADC rate and the 39 kHz
  sample rate. The boxcar averaging filter is also a choice.
- 16-bit ADC samples and all intermediate widths.
- The lincomb right shift of 7.
- Sigmoid as the LSTM gate activation, computed with PLAN. The original
  network was generated by an HLS tool, whose sigmoid is a lookup table, so
  results agree only to within the approximation error.
- Floor rounding with saturation.
- A stateful LSTM with one step per trigger sample.
- A FIFO depth of 4.
- The whole register map and its reset values.
- The window length, the tie rule of the peak search and the two specific
  Boolean trigger forms.

Not included:
- The ADCs and the FPGA clocking are outside this RTL.
- The second trigger level, readout and data acquisition are outside this
  RTL.
- No trained weights or filter coefficients are included. The testbenches
  use synthetic ones.

## Verification

Every module has a self-checking testbench in `tb/`, and so do the
fixed-point helpers of `nt_pkg` (`tb_nt_pkg`). Each compares the module
against an independent model written in the testbench and checks latencies
where a rate matters. Each prints `TB_RESULT checks=N failures=M`.
`tb/nn_ref_pkg.sv` holds a bit-exact reference of the network arithmetic,
with a real-valued model of the PLAN sigmoid. `tb_nn_dense`, `tb_nn_lstm`
and `tb_nn_module` check against it.

`tb_neural_trigger_top` runs the complete design at its default size through
one trace of 32768 ADC samples (1024 trigger samples, about 2.6 million
clocks).
- **Setup:** the intended path coefficients, synthetic FIR filters and
  random network weights.
- **Stimulus:** five phonon pulses on noise.
- **Checks:**
  - the 26 path outputs against the FIFO-delayed FIR outputs;
  - the network overwrite;
  - the path-0 threshold bit and every OR trigger (amplitude and time)
    against a model;
  - that each sample finishes within 2560 clocks.
- **Mechanisms it counts:** network overwrite, input masking, threshold
  crossings, primitives, OR and coincidence triggers, LSTM state clear, FIFO
  queueing and FIFO overflow. The overflow is forced by a final burst of
  back-to-back samples.

It takes about 15 s with Verilator.

`tb_hv_detector` sets up the same default-size design for a detector with
only six phonon channels, which needs 14 paths:
- paths 0 and 1: the phonon total;
- paths 2–13: the six single channels, each with a fast and a slow filter.

The other paths get zero coefficients and are masked off from the network.
Their ADC inputs carry junk. Over 256 trigger samples the testbench checks:
- every output vector;
- that the unused paths stay zero;
- one trigger per pulse.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/nt_pkg.sv tb/nn_ref_pkg.sv tb/tb_neural_trigger_top.sv \
    --top-module tb_neural_trigger_top
./obj_dir/Vtb_neural_trigger_top
```

Replace the testbench name to run another one. `nn_ref_pkg.sv` is only needed
by the network testbenches and the top testbench. The FIFO testbench uses a
narrower word to keep its model short, and the dense-layer testbench also
builds the 12→1 output layer. The top
testbench runs at full size.

`neural_trigger_top` is parameterised by paths, channels, taps and
downsampling factor. The register map is laid out for the default 26/12/1024,
and an elaboration-time assertion enforces this. To change the layer sizes,
edit `N_DENSE` and `N_LSTM` in `nt_pkg`. The weight addressing follows from
them.
