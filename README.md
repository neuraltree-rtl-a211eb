# NeuralTree SoC digital core

A closed-loop neural interface has to watch many electrodes, decide from
their activity whether the brain is in a state that needs treatment, and
then stimulate. Reading every electrode all the time is what makes such
chips big and power hungry. This design does it differently. A trained
oblique decision tree (the *NeuralTree*) is walked one node per
feature-extraction window. Each node names the 64 (channel, feature) pairs
it needs. Only those channels are routed to a single front end for that
window, and only those features are computed. The next node can pick a
different set of channels. This scheme is called *channel-selective
inference*. Up to 64 of the 256 electrodes are used per window, and a
class decision takes at most four windows.

This RTL is the synthesizable digital part of such a chip:

- timing and DC-servo control of the time-multiplexed recording front ends;
- switch-matrix and chopper control;
- a shared FIR filter and the feature extractors;
- the tree classifier and its parameter memory;
- an SPI configuration port;
- control of a 16-channel biphasic stimulator.

The analog circuits are not in the RTL. These are the switches, amplifiers,
Gm-C integrator, SAR ADC, CDAC, comparators, charge pumps and H-bridge
drivers. They connect through ports of the top module `neuraltree_soc`.

## Timing: ticks, slots, rounds, windows

There is one clock, at 6.4 MHz. Every other rate is an enable derived from
it.

| unit   | length                 | what happens |
|--------|------------------------|--------------|
| tick   | 156.25 ns              | one delta-sigma update of the DC-servo feedback |
| slot   | 50 ticks (128 kHz)     | one channel is sampled by a front end |
| round  | 64 slots (2 kHz)       | each of the 64 TDM slots is visited once |
| window | `win_len` rounds       | one tree node is evaluated |

Inside a slot, `afe_timing` produces these strobes:

- the reset and clear strobes at tick 0;
- the sampling phase `phi_smp` for ticks 0–47;
- the chopper clock `fchop`, high for the first half of the slot;
- nine comparator strobes `phi_comp` at ticks 9, 14, …, 49;
- the sample enable at tick 49.

The last two ticks of the slot are left for the ADC conversion. The
comparator strobes start late on purpose. The classifier settles its next
node a few clocks into slot 0 of a new window, and the first SAR compare of
that slot must already see the new channel.

`system_ctrl` counts slots and rounds.

- **Round 0** of every window is the *coarse* round. In it, each slot finds
  the electrode offset of its channel by a 9-bit binary search.
- **Rounds 1 … `win_len`−1** run the *fine* DC-servo loop. In inference mode
  they also feed the feature extractor.
- **Window end.** Four clocks after the last sample of the window,
  `win_done` tells the classifier that all 64 feature–weight products are
  accumulated.

## Training and inference modes

| mode      | front ends in use | which channel each slot samples |
|-----------|-------------------|---------------------------------|
| training  | all four (`afe_en=1111`) | module *m*, slot *s*: row 4m+s[5:4], column s[3:0], so all 256 electrodes are scanned in every round |
| inference | module 0 only (`afe_en=0001`) | the 8-bit channel number stored in the current node's slot word; row = ch[7:4], column = ch[3:0] |

In training mode the raw 10-bit words of all four modules leave the chip
(`train_valid`, `train_slot`, `train_data`), so a model can be trained
off-chip.

In inference mode only the row's MUX-CHOP closes its inference switch. The
channel set therefore changes from window to window with the tree node.
Chopper phases `phi1`/`phi2` follow `fchop`, with one dead tick at every
edge so they never overlap.

## The two-step DC servo loop (`dsl_ctrl`)

Every new channel brings its own electrode DC offset (EDO), up to about ±50 mV.
That is far more than the amplifier can take. Each front end
therefore feeds back a 9-bit CDAC word that cancels the offset at the
amplifier input.

- **Coarse step (round 0).** The nine comparator strobes of the slot run a
  successive-approximation search on the CDAC word. The result is the
  slot's EDO, stored in a 64×9 memory.
- **Fine step (later rounds).** Each ADC sample (offset binary, centred at
  512) is added to the slot's 19-bit integrator, which saturates. The stored
  EDO is placed on the 9 most significant bits of a 19-bit word. To this is
  added the integrator value, shifted right by `dsl_shift`. A first-order
  delta-sigma modulator reduces this 19-bit word to the 9-bit CDAC code, so
  the fractional part appears as dither.
- **Output encoding.** The code is sent out both as 9-bit offset binary and
  as the CDAC's 63 thermometer lines plus 3 binary bits.

The integrator is cleared at each coarse step.

## Features (`fee`, `temporal_spectral_fe`, `phase_fe`, `tdm_fir`)

Each slot word of a node holds a channel and a 4-bit feature code:

| code | feature | input | accumulated per window (rounds 1 … `win_len`−1) |
|------|---------|-------|-----------------------------|
| 0 | line length LL | ADC | Σ\|x[n]−x[n−1]\| |
| 1 | Hjorth activity ACT | ADC | Σ\|x\| |
| 2 | local motor potential LMP | ADC | Σx |
| 3 | Hjorth mobility MOB | ADC | Σ\|Δx\| / Σ\|x\| |
| 4 | Hjorth complexity COM | ADC | Σ\|x\|·Σ\|Δ²x\| / (Σ\|Δx\|)² |
| 5 | HFO ratio | BPF | Σ\|band A\| / Σ\|band B\| (slot pair) |
| 6 | phase–amplitude coupling PAC | BPF+HT | \|Σ A_hi·e^{jθ_lo}\| (slot pair) |
| 7 | phase-locking value PLV | BPF+HT | \|Σ e^{j(θ₁−θ₀)}\| (slot pair) |
| 8–15 | spectral energy SE, bands 0–7 | BPF | Σ\|BPF_band(x)\| |

Absolute values stand in for squares and square roots throughout. Ratios
use a divider-free unit (`ratio_calc`), described below, with Q8 results.

**Features that need two signals.** HFO ratio, PAC and PLV use an
even/odd pair of slots, 2k and 2k+1. Each slot of the pair takes its band
from a configuration register. For example, PAC takes the phase band on the
even slot and the amplitude band on the odd slot. The feature value comes
out on the odd slot, and the even slot reports 0. With zero weight on the
even slot, this keeps exactly one number per slot, 64 per node.

**Magnitude estimate for phase features.** A complex sum is reduced to
max(|Σsin|, |Σcos|) (an l∞ magnitude). It is then shifted by `feat_shift`.
All features saturate to 16 bits.

**Filter.** `tdm_fir` is one arithmetic set shared by all 64 slots.

- **Band-pass (BPF).** A symmetric 32-tap filter: 16 pre-adders and 16
  multipliers.
- **Hilbert transformer (HT).** An antisymmetric 31-tap filter fed by the
  BPF output: 15 pre-subtractors and 15 multipliers.
- **Analytic signal.** Its real part is the BPF output delayed by 15
  samples (the HT group delay).
- **Delay lines.** Each slot's delay lines are one memory word, read,
  shifted and written back when the slot's sample arrives. They are cleared
  by the first sample of a window.
- **Coefficients.** Signed Q1.11, 12 bits. There are eight BPF banks and
  one HT bank.

**Phase (`phase_fe`).** The phase uses 1024 steps per turn.

- The octant ratio min/max is computed by `ratio_calc`.
- The arctangent is linear plus a 32-entry correction table,
  corr(i) = 0.273·x(1−x) radians at x = (2i+1)/64, converted to phase
  steps (×1024/2π) and rounded. It is then folded
  to the right octant and quadrant.
- Sine and cosine come from a 256-entry table built at elaboration from
  Bhaskara's approximation:
  sin(πu/128) ≈ 4u(128−u)/(20480−u(128−u)), scaled to ±127.

**Divider (`ratio_calc`).** It normalises the denominator with a
leading-zero count and takes a 64-entry reciprocal,
round(2^13/(64+i)). It then multiplies and shifts back. The error is within
about 3 %. A zero denominator gives the largest value.

## The classifier (`neuraltree`, `param_mem`)

**Shape.** The tree has 15 internal nodes (depth 4) in heap order and 16
leaves.

**Node evaluation.** One node uses 64 MACs of a 16-bit feature by a 12-bit
signed weight, accumulated in 48 bits. At `win_done`:

- **Compare.** The accumulator is tested against the node's 12-bit
  threshold, shifted left by `th_shift`: *acc > TH·2^th_shift*. This is the
  sign of the sigmoid split the tree is trained with.
- **Next node.** *Yes* moves to node 2n+1, *No* to node 2n+2.
- **Leaf.** Stepping past node 14 gives a leaf, and the leaf's 3-bit
  class label is output with `class_valid`. Evaluation then restarts at
  the root.

One path through the tree therefore costs four windows. Labels are 3 bits,
so multi-class tasks up to eight classes are possible.

**Memory.** The parameter memory holds about 2.9 kB of tree data:

- 15 × 64 slot words of 12 bits, `{channel[7:0], code[3:0]}`;
- 15 × 64 weights of 12 bits;
- 15 thresholds of 12 bits;
- 16 labels of 3 bits.

Alongside the tree data it holds the FIR banks (9 × 16 × 12 bits) and
twenty 16-bit configuration registers. Only the configuration registers
are reset. Everything else must be loaded before `run` is set.

**Read ports.** Two ports read the node memory:

- one at the current scan slot, which picks the channel and feature code;
- one at the slot of the feature leaving the extractor, which picks the
  matching weight.

### Address map (16-bit word bus)

| address | contents |
|---------|----------|
| 0x0000 + node·64 + slot | slot word {channel, code} |
| 0x0400 + node·64 + slot | weight |
| 0x0800 + node | threshold |
| 0x0C00 + leaf | class label |
| 0x1000 + bank·16 + tap | FIR coefficient (bank 8 = Hilbert) |
| 0x2000 + reg | configuration register |

| reg | field |
|-----|-------|
| 0 | [0] run, [1] inference mode, [2] chopper enable, [3] stimulation enable |
| 1 | window length in rounds (≥ 3) |
| 2 | DC-servo integrator shift |
| 3 | feature shift |
| 4 | threshold shift |
| 5 | bands: PLV [2:0], PAC phase [5:3], PAC amplitude [8:6], HFO A [11:9], HFO B [14:12] |
| 6 | class mask that triggers stimulation |
| 7 | stimulation channel enables |
| 8 | stimulation amplitude code |
| 9 | pulse width, 640 kHz ticks |
| 10, 11[0] | pulse period, 640 kHz ticks (17 bits) |
| 12 | active charge-balance time |
| 13 | passive discharge time |

### SPI frame

`spi_slave` uses SPI mode 0, MSB first, in 32-bit frames:

- bit 31: write;
- bits 30–16: address;
- bits 15–0: data.

For a read, the slave shifts the addressed word out on the last 16 clocks.
SCLK, CS and MOSI are synchronised to the core clock, so SCLK must stay
below a quarter of it.

## Stimulation (`stim_ctrl`)

The stimulator works in 640 kHz ticks (every tenth clock). It is triggered
while stimulation is enabled and the last class is in the class mask. A
pulse runs through these phases:

1. **Anodic** (`pos_h`/`pos2`) for *pw* ticks.
2. **Cathodic** (`neg_h`/`neg2`) for *pw* ticks.
3. **Residue check.** One tick with `cb1`, in which the per-channel residue
   comparators `res_hi`/`res_lo` are latched.
4. **Active balancing.** For *cb_t* ticks, on channels with a residue:
   `en_cbn` for a high residue, `en_cbp` for a low one.
5. **Passive discharge** (`pas`) for *pas_t* ticks.
6. **Wait.** Until *period* ticks have passed since the pulse began. It
   repeats while the trigger holds.

Other outputs:

- **Charge pumps.** Each module of four channels runs its charge pump
  (`cp_en`) whenever a pulse is under way on one of its channels.
- **Amplitude.** The amplitude code passes straight to the current DACs.

The range covers 9.375 µs–203 µs pulse width and 9.6 Hz–65 kHz rate (6–130
and 10–66 667 ticks).

## Files

| module | role |
|--------|------|
| `nt_pkg` | constants, feature codes, slot word and configuration record, band/source selection |
| `afe_timing` | per-slot strobes |
| `mux_chop_ctrl` | column decoder, row chopper phases for training and inference paths |
| `dsl_ctrl` | coarse SAR + fine delta-sigma DC servo, CDAC encoding (one per front end) |
| `system_ctrl` | slot/round/window counters, channel addressing, FEE strobes |
| `tdm_fir` | shared BPF/HT filter |
| `ratio_calc` | normalise–reciprocal divider |
| `temporal_spectral_fe` | LL, ACT, LMP, MOB, COM, HFO ratio, SE |
| `phase_fe` | phase estimate, PLV, PAC |
| `fee` | filter + both extractors, routing by feature code |
| `neuraltree` | node MAC, compare, traversal, label output |
| `param_mem` | parameter memory and configuration registers |
| `spi_slave` | configuration port |
| `stim_ctrl` | stimulation sequencer |
| `neuraltree_soc` | top |

Each module has a self-checking testbench `tb/tb_<module>.sv`, and
`tb/tb_neuraltree_soc.sv` is the end-to-end test and
`tb/tb_workload_multiclass.sv` a six-class decoding run. To run one with
Verilator 5:

```
verilator --binary --timing -Wno-fatal --top-module tb_fee \
  rtl/nt_pkg.sv rtl/*.sv tb/tb_fee.sv
./obj_dir/Vtb_fee
```

Each prints `TB_RESULT checks=N failures=M`.

## What the tests show

**Block tests.** They compare each module with a reference computed inside
the testbench:

- **FIR:** direct convolution.
- **Extractors:** the sums and ratios defined above; ratios are compared
  with a relative tolerance.
- **Phase:** compared with `$atan2` to within ±15 of 1024 steps.
- **Tree:** the walk with the same parameters.
- **Stimulator:** phase lengths counted in clock cycles.
- **Servo:** with a comparator model, the coarse search must find each
  slot's offset. The fine loop must then hold the average ADC code.

**End-to-end test.** `tb_neuraltree_soc` runs the top with all parameters
at their defaults.

*Setup:*

- **Front end.** A behavioural model stands in for it. It gives 256
  electrode offsets and a sine on electrode 37. It decodes the selected
  electrode from the switch outputs and answers the comparator and ADC
  from the CDAC code.
- **Loading.** Every memory word is loaded over SPI, and a sample of them
  is read back.
- **Training.** A training-mode run checks that all four modules stream
  data.
- **Offset step.** A step of electrode offset is applied, and the fine loop
  must move the CDAC code.
- **Inference.** The tree is programmed so that each depth depends on one
  feature of electrode 37: activity, line length, band energy, activity.
  A large sine must then reach leaf 0, and a small one leaf 15. Six class
  decisions are checked.

*Mechanisms counted, each of which must occur:* training scan, mode switch,
chopper phases, coarse search, fine tracking, both branch directions,
correct classes, biphasic pulses, active and passive balancing.

**Six-class decoding.** `tb_workload_multiclass` uses the same front-end
model. It gives leaf l the label l mod 6. Each depth of the tree decides on
the activity of its own electrode (37, 90, 150 or 230). Each of those
electrodes carries a large or a small sine, so the four on/off choices name
one of the 16 leaves. Ten trees with random patterns are run, and each
class must match the label of the leaf its pattern names. This is the
routing a trained multi-class tree does; no recorded ECoG is used.

The windows in both tests are 16 rounds (8 ms). Real use would program
windows of about one second (`win_len` ≈ 2000).

## Where this RTL departs from, or goes beyond, the paper

- **Interpretations.** The published description gives the architecture,
  but not the bit-level behaviour. Everything in this list is this RTL's
  interpretation:
  - the encodings, the address map and the SPI port;
  - the slot-pair scheme for two-signal features;
  - the arctangent and sine tables;
  - the l∞ magnitude;
  - the exact strobe positions in a slot;
  - heap-ordered nodes;
  - the stimulator phase order.
- **Clocking of the classifier.** The classifier is described as clocked at
  128 kHz, performing its 64 MACs in the last 64 cycles of a window. Here it
  runs on the 6.4 MHz clock and accumulates each feature as the extractor
  releases it, during the last round.
- **Hilbert multipliers.** The Hilbert stage has its own 15 multipliers
  rather than reusing the band-pass multiplier array in a second pass.
- **Fine-loop gain.** The 19-bit integrator holds ADC counts with the EDO on
  its 9 MSBs, so one CDAC step equals 1024 integrator counts (shifted by
  `dsl_shift`). The loop's high-pass corner therefore depends on the analog
  gain from the CDAC to the ADC, which is not given. With 20 ADC counts per
  CDAC step and `dsl_shift` = 0, a residual of one step is removed in about
  50 rounds (25 ms). The end-to-end test uses 4 counts per step.
- **Tree shape.** Depth 4 (15 nodes, 16 leaves) and 3-bit labels were
  chosen to fit the 2.93 kB parameter budget. The published tree size may
  differ.
- **Inference front end.** Only front-end module 0 feeds the feature
  extractor in inference.
- **Training data path.** Training data leave through a parallel port. No
  serial read-out was built.
- **Analog parts.** None are in the RTL: the switch matrix, LNA, integrator,
  ADC, comparators, CDAC, charge pump, its clock generator and the output
  drivers.
- **Feature coverage of the system tests.** Only activity, line length
  and band energy decide classes in the end-to-end test, and only activity
  in the six-class test. The other features are verified in the block
  tests. No recorded EEG, iEEG, LFP or ECoG data is replayed.

## Workloads

| task (channel counts from the published evaluation) | fits? |
|------|-------|
| Seizure detection on scalp EEG, 18–28 channels | yes: 256 channels in training; ≤ 64 (channel, feature) pairs per node in inference |
| Seizure detection on intracranial EEG, 47–108 channels | yes, same limits |
| Parkinsonian tremor from 4 deep-brain LFP channels (Hjorth, band energy, HFO ratio, PAC) | yes |
| Finger-movement decoding, 6 classes | yes: 16 leaves with 3-bit labels hold up to 8 classes; `tb_workload_multiclass` runs a 6-class tree |
