# Raven: a spiking RBM that learns inside a PCM crossbar

This is a SystemVerilog model of a neuromorphic accelerator that trains a
restricted Boltzmann machine (RBM) on chip, with no processor and no separate
weight memory. The weights are stored as conductances of phase-change memory
(PCM) cells in an 832 × 832 crossbar. The same cells that hold a weight also:

- carry spikes forward from the visible layer to the hidden layer;
- carry them backward from the hidden layer to the visible layer;
- change themselves when a row pulse and a column pulse overlap.

Learning is spike-timing-dependent plasticity (STDP) applied in place. It is
driven by the exact shapes and delays of the pulses each neuron emits when it
fires. The target application is keyword spotting: MFCC images of one-second
speech commands are turned into Poisson spike trains and fed to the visible
neurons. Label neurons learn to fire for their class, and a winner-take-all
count of label spikes gives the answer.

Much of the real chip is analog: the PCM devices, current mirrors and membrane
capacitors. In this RTL those parts are **behavioural models** with a clean
digital abstraction. The part that is pure control is **synthesizable RTL**:

- pulse sequencing;
- phase control;
- Poisson input generation;
- label counting.

Neither is a transistor-level description. Both reproduce the event behaviour
that makes on-chip learning work.

## 1. The synapse and its lines

Each crossbar cell is a pair of 3-transistor/1-resistor circuits. One is built
around resistor Rp and the other around Rn. The signed weight is the
conductance difference, **w = Gp − Gn**. Each cell connects to the rest of the
chip through the lines below. Each row (a visible, or presynaptic, neuron)
drives three word lines, and each column (a hidden, or postsynaptic, neuron)
drives two.

| line | driven by | effect on the cells it touches |
|---|---|---|
| `LIF_WL` | row neuron | **forward read**: every column neuron integrates Gp − Gn of this row's cell |
| `BLIF_WL` | column neuron | **backward read**: every row neuron integrates Gp − Gn of this column's cell |
| `STDP_WL_Rp` | row neuron | opens the programming transistor of Rp; level `VWLL` (low, long) = set, `VWLH` (high, short) = reset |
| `STDP_WL_Rn` | row neuron | the same for Rn |
| `STDP_BL` | column neuron | programming pulse (`VSBL`). It changes a cell only where that cell's row has an `STDP_WL` line open at that moment |

In the RTL a row's lines are one packed struct, `row_lines_t`: two 3-level
enums (`WL_GND / WL_VWLL / WL_VWLH`) and a read bit. A column's lines are
`col_lines_t`, holding two bits. The analog line voltages only matter through
this encoding:

| line level | value |
|---|---|
| VSBL | 2.5 V |
| VBWL, VLWL | 1.2 V |
| VWLL | 0.75 V |
| VWLH | 1.4 V |

`pcm_synapse_array` holds each conductance as an integer from 0 to 255. It
evaluates all three operations once per tick:

- **Reads.** A *rising edge* of a read line counts as one read spike. The sums
  of Gp − Gn over all rows (for columns) or all columns (for rows) hit that
  tick are presented one tick later, with a valid strobe.
- **Programming.** A rising edge of `STDP_BL` on column *j* looks at every row
  *i*:
  - a `VWLL` line moves that conductance of cell (*i*, *j*) up one level;
  - a `VWLH` line moves it down one level;
  - levels saturate at 0 and 255.

  The counters `set_events` and `reset_events` count these steps.
- **Power-up.** Conductances come up at a fixed pseudo-random spread of levels
  112..143, so weights start near zero but are not all equal. The spread is a
  hash of row and column in `raven_pkg::g_power_up`.

Real PCM changes by amounts that depend on pulse energy and device history.
The one-level step is the simplest model that keeps the sign and order of
events.

## 2. Pulse patterns: how timing becomes learning

This is the heart of the design. A neuron that fires does not emit one
spike. It plays a fixed pattern on its lines, measured from the firing tick.
Four intervals set the pattern: *a*, *b*, *c* and *d*.

**Column (postsynaptic) pattern**, in `post_pulse_gen`:

```
t = 0 fire
STDP_BL   high for  a <= t < a+c      (learning phases only)
BLIF_WL   high for  b <= t < b+c      (backward read spike)
```

**Row (presynaptic) pattern**, in `pre_pulse_gen`:

```
t = 0 fire
set line    VWLL for  a+b <= t < 2a+2b
reset line  VWLH for  a+b <= t < a+2b
LIF_WL      high for  d   <= t < d+c  (forward read spike)
```

Which physical line carries the set and reset pulses depends on the phase:

| phase | `STDP_WL_Rp` | `STDP_WL_Rn` | effect of a coincident `STDP_BL` |
|---|---|---|---|
| data | set (VWLL) | reset (VWLH) | Gp up, Gn down: **weight up** |
| model | reset (VWLH) | set (VWLL) | Gp down, Gn up: **weight down** |
| inference, idle | ground | ground | none; `STDP_BL` is also suppressed |

A cell changes only when column *j*'s `STDP_BL` rises while row *i*'s window
is open. The column's `STDP_BL` rises at *a* after the column fires. So, with
*Δ* = (column fire time) − (row fire time):

- the set line acts for **b ≤ Δ < a + 2b**;
- the reset line acts for **b ≤ Δ < 2b**.

"The hidden neuron fired shortly after the visible neuron" therefore
strengthens the pair in the data phase and weakens it in the model phase.
This is the event-driven contrastive-divergence rule of a spiking RBM. Close
pairs (Δ < 2b) move both conductances of the cell, and looser pairs move only
one.

Some of the timing is this design's reading, not something the pulse table
states outright:

- **Window boundaries.** The timing diagram prints the interval labels
  (*a, b, b, a* along the row's programming lines; *d* then *c* for
  `LIF_WL`; *a*, *b* and *c* for the column). The exact window edges above
  are read off its dotted markers.
- **Consistency check.** The reading is consistent with the published range
  of *d*. At both ends of the range, *d* = 2*a* + 2*b*: the read spike leaves
  just as the set window closes.
- **Order of the column pulses.** The description of the column says
  `STDP_BL` fires first and `BLIF_WL` "after some delay". With the published
  numbers, however, *b* < *a*, so `BLIF_WL` comes first. The RTL follows the
  labelled diagram.
- **Sign convention.** The source is not consistent about which diagram
  raises the weight. This design takes the reading that matches the set and
  reset physics (VWLL sets, which raises G) and the training description
  ("updated positively" in the data phase).

Both generators are one-shot and not retriggerable. A fire that arrives while
the pattern still plays is ignored and counted on `pre_dropped` /
`post_dropped`. At the largest timing the row pattern lasts 4.25 ms, slightly
longer than the 4 ms refractory period, so this can happen. `timing` and
`phase` are latched when a pattern starts, so a phase change never truncates
a pattern.

### Time base

The silicon is asynchronous. Here everything advances on one clock of
**1 tick = 10 ns** (`raven_pkg::TICK_NS`), the coarsest grid that still
resolves the shortest pulse width *c*. The intervals are run-time inputs, in
ticks:

| interval | published range | ticks (min / max) | RTL default |
|---|---|---|---|
| a | 9.1 µs – 2040 µs | 910 / 204 000 | 204 000 |
| b | 4.4 µs – 85.8 µs | 440 / 8 580 | 8 580 |
| c | 20 ns – 79 ns | 2 / 8 | 8 |
| d | 27 µs – 4251.6 µs | 2 700 / 425 160 | 425 160 |

The published ranges depend on the array size; the maximum values are used
as defaults for the full 832 × 832 array. A 79 ns pulse rounds to 8 ticks.

## 3. Neurons

Every row and every column has a leaky integrate-and-fire neuron
(`lif_neuron`, a behavioural model). It is wrapped with its pulse generator
into `pre_neuron` (row) or `post_neuron` (column). Its membrane potential is a
Q8.16 number in which 1.0 is the threshold.

- **Integrate.** A read spike that reaches the neuron adds
  α · ΣΔG / 256, with α = 0.06. A single full-scale cell (255/0) therefore
  moves the potential by 0.06, and about 17 such spikes fire the neuron.
- **Leak.** Every τ/16 = 62.5 µs the potential loses 1/16 of itself. This is
  a stepwise exponential toward rest (0) with τ ≈ 1 ms.
- **Fire.** The neuron fires when the potential reaches 1.0, or at once when
  its spike input pin is pulsed. Firing resets the potential to 0 and starts
  a 4 ms refractory period, during which inputs are ignored.
- **Saturation.** The potential saturates at about ±128.

The fire strobe is both the neuron's spike output pin and the trigger of its
pulse generator. The spike input pin is how external Poisson trains enter,
and it is also exposed at the top level.

| neuron parameter | value |
|---|---|
| rest / reset | 0 |
| threshold | 1 |
| α | 0.06 |
| τ | 1 ms |
| refractory | 4 ms |

The stepwise leak, the fixed-point format and the way α scales the cell
current are modelling choices.

## 4. Mapping the RBM and running it

Rows are the visible layer and columns the hidden layer. The defaults give a
412 × 508 RBM, which uses 209 296 of the array's 692 224 cells. The rows and
columns that are left over are held at rest.

| rows | use |
|---|---|
| 0 – 383 | image neurons (a 16×16 and an 8×16 MFCC image side by side) |
| 384 – 403 | label neurons |
| 404 – 411 | visible bias neurons |

| columns | use |
|---|---|
| 0 – 499 | hidden neurons |
| 500 – 507 | hidden bias neurons |

`phase_controller` runs one of two sequences. Each phase lasts a
programmable number of ticks, and the input gates are:

| phase | Poisson inputs enabled | programming | label counters |
|---|---|---|---|
| data (training) | image, label of the true class, all bias | weight up | — |
| model (training) | bias only | weight down | — |
| inference | image, all bias | off | counting |

- **Training.** `start_train` runs data, then model, then pulses `train_done`.
- **Inference.** `start_infer` clears the counters, runs one inference phase,
  then pulses `infer_done`; `result_class` / `result_valid` follow within two
  ticks.

In the model phase only internal spikes and the bias trains circulate, so the
network "dreams" and the negative updates remove what it would produce
without data.

**Poisson inputs** (`poisson_spike_gen`). Each input neuron has its own
xorshift32 generator with a distinct seed. Every 1 µs slot it makes one
Bernoulli trial with probability `intensity · poisson_thr / 2^32`. At the
nominal scale `poisson_thr = 337`, full intensity (255) gives 20 Hz and
intensity 0 gives silence. The true class's label neurons and all bias
neurons run at intensity 255, and the other label neurons at 0.

**Classification** (`label_spike_counter`):

1. Label neuron *k* belongs to class *k* mod `num_classes`.
2. During inference, each neuron's spikes are counted with saturating
   16-bit counters.
3. The per-class sums are compared, and the largest wins; a tie goes to the
   lowest class.

With 20 label neurons this gives 5 neurons per class for 4 classes, 2 per
class for 10, and 2 or 1 each for 12.

## 5. Top-level interface (`raven_top`)

| group | ports |
|---|---|
| configuration | `timing` (a, b, c, d in ticks), `data_ticks`, `model_ticks`, `infer_ticks`, `poisson_thr`, `num_classes`, `label_class` — change only while `busy` is low |
| sample / command | `image[N_IMAGE]` (8-bit pixels), `start_train`, `start_infer` (one-tick strobes, accepted when idle) |
| spike pins | `ext_pre_spike`, `ext_post_spike` in; `pre_spike_out`, `post_spike_out` out, one bit per neuron, ORed with the internal trains |
| status | `phase`, `busy`, `train_done`, `infer_done` |
| result | `result_class`, `result_valid`, `label_count[N_LABEL]` |
| activity | `set_events`, `reset_events`, `pre_dropped`, `post_dropped` |
| observation | `dbg_row`, `dbg_col` → `dbg_gp`, `dbg_gn` (combinational read of one cell) |

Parameters:

- `NPRE`, `NPOST` (832);
- `N_IMAGE` (384), `N_LABEL` (20), `N_VBIAS` (8), `N_HIDDEN` (500),
  `N_HBIAS` (8);
- `LEAK_TICKS` and `REFR`, which exist so tests can run at a faster time
  scale.

## 6. What fits

| configuration | rows needed | columns | fits 832 × 832 |
|---|---|---|---|
| two images 16×16 + 8×16, 20 labels, 8+8 bias, 500 hidden (default) | 412 | 508 | yes |
| one 22×22 MFCC image | 512 | 508 | yes, with `N_IMAGE=484` |
| image sweep 8×8 … 26×26 | 92 … 704 | 508 | yes, with `N_IMAGE = w·h` |
| 4, 5, 10 or 12 classes | unchanged | unchanged | yes; `num_classes` is a run-time input, up to 20 |
| 32×32 image | 1052 | 508 | no |

## 7. How far to trust it, and where it departs

It follows the published design in these respects:

- the cell structure, line names and the roles of the lines;
- the order and the intervals of the pulse patterns;
- the phase polarity, and disabling programming in inference;
- the array size and the RBM sizes;
- the neuron parameters;
- which neuron groups get input in each phase;
- winner-take-all on label spikes.

These are this design's own choices:

- **Clocked model.** A 10 ns tick replaces asynchronous analog operation.
  Reads are counted per spike edge, not integrated over the pulse width.
- **Conductances.** 256 levels, a ±1 step per programming event, linear and
  symmetric, with no drift or device variation. The source only cites cells
  with 200–1000 states.
- **Initial conductances.** The power-up spread of 112..143 levels.
- **Neuron arithmetic.** The neuron's fixed-point arithmetic and stepwise
  leak. The real current-mirror neuron is described elsewhere and only its
  parameters are given.
- **Pulse generators.** Not retriggerable while a pattern plays.
- **Poisson inputs.** The generator is built on chip here. In the original
  system the trains are generated externally; this block stands in for that
  input circuitry.
- **Label inputs.** Label neurons of the other classes are silent, where the
  source says only "low rate". Label-neuron-to-class assignment, tie-breaking
  and the counter width are also this design's.
- **Interface.** Phase lengths, start/done handshakes and the cell
  observation port.
- **Left out.** The analog drivers, the current-mirror circuit and the
  MFCC front end (STFT, Mel filter, DCT, normalisation) are not modelled. The
  front end runs in software before the chip; images enter as 8-bit pixels.

## 8. Files and simulation

`rtl/` holds one module per file:

- `raven_pkg` — constants, line and timing types;
- `pcm_synapse_array`, `lif_neuron` — behavioural models;
- `pre_pulse_gen`, `post_pulse_gen`, `pre_neuron`, `post_neuron`;
- `poisson_spike_gen`, `phase_controller`, `label_spike_counter`;
- `raven_top`.

`tb/` holds one self-checking testbench per module. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Two of them exercise the
whole system:

- **`tb_raven_top`** uses a reduced 16 × 12 array with a short refractory
  period and short pulse timing. It checks, and counts, each mechanism:
  - forward and backward reads;
  - data-phase and model-phase programming with the right sign;
  - no programming in inference;
  - phase switching;
  - label classification;
  - Poisson-driven training;
  - a hidden neuron firing by threshold after a cell has been trained to full
    scale (about 17 row spikes).
- **`tb_raven_full`** uses the full-size default top (832 × 832, with all
  parameters at the defaults) and the minimum pulse timing. It runs forced
  STDP pairs in both phases, a Poisson training sample at a 10× input rate,
  and an inference with classification. At full size it skips the
  threshold-firing case: 255 programming steps at a 4 ms refractory period
  take about 10⁸ ticks.

- **`tb_raven_mfcc22`** runs the same sequence as `tb_raven_full`, on the
  full array with a single 22 × 22 image (`N_IMAGE=484`). It uses four
  classes, so each class has 5 label neurons.

To build and run with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing -Wno-fatal -Irtl -y rtl \
  rtl/raven_pkg.sv tb/tb_raven_top.sv --top tb_raven_top -Mdir obj -o sim
./obj/sim
```

To run another testbench, replace `tb_raven_top` with its name.
`tb_raven_full` builds in well under a minute and runs in about 90 s. The
testbenches use two-state types throughout and initialise everything they
read.
