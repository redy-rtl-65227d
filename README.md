# ReDy: per-group dynamic activation precision for a ReRAM CNN accelerator

Crossbar accelerators for CNNs store weights as conductances in ReRAM arrays.
They feed activations into the array one bit at a time. Each input bit costs
one analog dot product on every bitline, plus one A/D conversion per bitline.
The cost of a layer is therefore proportional to the number of activation
bits, and most of that cost is the ADCs.

ReDy lowers that bit count on the fly. The activations that enter one
crossbar together form a *group*. This is one kernel position (r,s) across
all input channels of a window. Each group gets its own precision, between 3
and 8 bits. The choice depends on the shape of the group's value
distribution:

- A group whose values are spread evenly over the range survives coarse
  quantization. It gets few bits.
- A group whose values pile up in one small region does not survive it, and
  keeps more bits.

The shape is measured cheaply. The unit takes a histogram of the FP32
exponents and measures how far it is from a reference histogram. Thresholds
on that distance choose the precision. The crossbar then runs only p bit
steps instead of eight, so it makes only p/8 of the conversions.

This repository holds synthesizable SystemVerilog for that accelerator, at
the organisation the published design uses:

- a chip with a global buffer, ReDy units, a quantizer, accumulation,
  activation and pooling;
- tiles of PEs, and PEs of APUs (analog processing units);
- in each APU a 128×128 crossbar of 2-bit cells, read through 16 shared 5-bit
  ADCs.

The crossbar and the ADC are analog parts. They are given as behavioural
models with exact integer arithmetic.

## The precision decision (`redy_unit`)

One ReDy unit handles one group at a time. It has three stages.

**Histogram module (`redy_hm`).** Each activation's 8-bit exponent is
compared with seven ascending boundaries r0..r6. The comparisons form a
thermometer code, and the code selects one of eight 10-bit bin counters:

- bin 0 holds e < r0;
- bin i holds r(i-1) ≤ e < r(i);
- bin 7 holds e ≥ r6.

Because the bins are defined on exponents, they are logarithmic in value. No
multiplier or FP comparator is needed.

For subsampling, set `sample_stride = k`. Only activations 0, k, 2k, … of the
group are then binned. The published design only says that subsampling is
used and that about 10 % is enough. The selection pattern is this design's.

**Error module (`redy_em`).** After the last activation the controller steps
a bin-select counter through the eight bins, one per cycle. Each step does
SUB, ABS and ACC: the unit subtracts that bin's expected count ED[i], takes
the absolute value and accumulates. ED is a per-bin table. Setting all eight
entries to n/8 gives the plain "distance from uniform" measure. Other
settings give any non-uniform reference.

The sum is then divided by the number of binned samples n = 2^n_log2. The
division is only a choice of where the binary point sits. The result is
presented as DU, an 11-bit unsigned Q1.10 value. DU saturates at 2047.

**Decoder (`redy_pdem`).** Five comparators test DU > p1 … DU > p5. The
first that holds gives the precision: 8, 7, 6, 5 or 4 bits. If none holds,
the precision is 3 bits. A group with fewer elements than bins (layer depth
< 8, as in a 3-channel first layer) bypasses the decision and uses 8 bits.

**Controller (`redy_ctrl`).** The controller is a four-state machine:
IDLE → HIST → ERR → DEC. Its timing is:

- The group is accepted one activation per cycle, starting the cycle after
  `grp_start`.
- `done` comes N_BINS+1 = 9 cycles after the last activation.
- The precision register holds from the cycle after `done` until the next
  decision.

A unit is therefore busy for depth + 10 cycles per group. The published
design notes that too few units cause stalls. The chip has `N_REDY` = 3 units
and hands groups to them round-robin. When the next unit is still busy, the
input stream waits, and the chip raises `stall` for that cycle.

Per-layer configuration (`redy_cfg_t`):

| field | meaning |
|---|---|
| `bound[6:0]` | bin boundaries as exponent values, ascending |
| `ed[7:0]` | expected count per bin, 10 bits |
| `p[4:0]` | thresholds p1..p5 in Q1.10 (`p[0]` is p1, the 8-bit threshold) |
| `depth` | channels per group (also the crossbar rows used) |
| `n_log2` | log2 of the number of binned samples |
| `sample_stride` | subsampling step, 0 or 1 for none |

## Quantization to a group precision (`uniform_quant`)

Every group of a layer shares one scale s and one zero point z. This is what
allows their partial sums to be added. The quantizer works in two steps:

1. It computes the 8-bit code Q8 = clip(round(r·s) − z, 0, 255). The scale is
   given as s = scale_m·2^scale_e, so r·s is a 24×16-bit multiply of the
   mantissa followed by a shift.
2. It reduces Q8 to p bits by dividing by 2^(8−p) with rounding, saturating
   at 2^p−1.

The p-bit code keeps the weight of Q8's top bits. After the crossbar, the
APU shifts its result left by 8−p, so groups of different precision land on
the same scale.

Negative inputs, zeros and denormals give 0. Inf and NaN saturate.

## Bit-serial crossbar (`apu`, `reram_xbar`, `adc`)

**Weight layout.** An 8-bit weight occupies four adjacent 2-bit cells:
column 4k+j holds bits 2j+1:2j of output channel k. A 128-column crossbar
thus holds 32 output channels × up to 128 input channels for one kernel
position.

**Run sequence.** On `start` the APU latches its group (the PE buffer
contents) and the group's precision p. It then runs p input-bit steps,
least significant bit first. In each step:

- The wordlines carry one bit of each input.
- The bitlines settle to the column dot products (`reram_xbar`).
- The 128 columns are converted through 16 ADCs in 8 phases; ADC a converts
  column 16m+a in phase m.
- A 5-bit ADC clips any column sum above 31 (`adc`, flag `adc_sat`).
- Shift-and-add units weight each slice by 4^j and each bit step by 2^b.

**Timing.** `done` comes p·8+2 cycles after `start`, with the 32 partial sums
valid.

At 8 bits the APU makes 8×128 conversions per group. At p bits it makes p×128.
That ratio is the saving the design is built for.

Weights are unsigned codes. The ADC clipping is part of the model, not an
error: the reference models in the testbenches clip in the same way.

## Hierarchy and accumulation (`pe`, `tile`, `accum_unit`)

The hierarchy is:

- a PE holds `APUS_PER_PE` = 3 APUs, their input buffer and an accumulation
  unit;
- a tile holds `PES_PER_TILE` = 2 PEs and an accumulation unit;
- the chip holds `N_TILES` = 2 tiles and a chip-level accumulation unit.

That gives 12 APUs, so a layer window may use up to 12 groups.

All APUs of a window start together, each with its own precision. A PE waits
for its slowest APU, registers the sum of their vectors, and pulses `done`
one cycle later. A tile does the same over its PEs. The chip adds the tile
vectors once all tiles have reported.

The published design sizes the hierarchy per network with a floorplanning
tool. The 2×2×3 default here is one choice. All three counts are parameters.

## Chip dataflow (`redy_chip`)

A layer is run as `n_windows` windows. Each window has `n_groups` ≤ 12 groups
of `depth` ≤ 128 channels. Group g uses APU g: tile g/6, PE (g mod 6)/3,
APU g mod 3. The host loads FP32 activations into the 4096-word global buffer
and programs the crossbars. It then pulses `start`. For each window the
controller runs the three published stages in sequence:

1. **Pre-processing, histogram pass.** Each group is read from the buffer and
   streamed into the next ReDy unit in turn. `grp_valid`, `grp_id` and
   `grp_prec` report every decision.
2. **Pre-processing, quantization pass.** When all decisions are back, each
   group is read again, quantized to its own precision and written into its
   APU's PE buffer. Unused rows and unused APUs get zeros.
3. **Execution.** All APUs start together.
4. **Post-processing.** The chip adds the tile results. Then one activation
   unit per output channel (`act_unit`) computes
   y = max(acc − offset, 0)·2^−frac as FP32. The offset carries the
   zero-point correction; the power of two is the inverse scale.
5. **Pooling and write-back.** `pool_unit` keeps the element-wise maximum over
   `pool_n` consecutive windows. Each completed vector of 32 outputs is
   written to the global buffer.

Buffer layout:

- activation (window w, group g, channel c) is at
  `in_base + (w·n_groups + g)·depth + c`;
- output vector o is at `out_base + 32·o`.

The buffer port belongs to the host while the chip is idle.

Configuration is held on the `rcfg`, `qcfg` and `pcfg` structs during a run.
An assertion checks that `depth` ≤ 128 and `n_groups` ≤ 12 at `start`.

## Where this RTL departs from the published design

- **No pipelining across windows or layers.** The published accelerator runs
  all layers at once in a deep pipeline. Pre-processing of the next window
  there overlaps execution. Here the stages of one window follow one another,
  and the chip runs one layer at a time. Throughput numbers of the published
  design therefore do not apply.
- **Capacity.** The published design assumes enough crossbars for a whole
  network. This chip holds 12 × 128 × 32 = 49,152 weights. VGG-16, ResNet-50
  and DenseNet-161 each need 15–27 million weights, so a layer has to be cut
  into passes by the host, with reprogramming and partial-sum addition in
  between. Two examples:
  - The DenseNet-161 layer with a 56×56×192 input and 48 output channels needs
    four passes: two channel halves times two output halves.
  - The 7×7 first layer of ResNet-50 has more kernel positions than there are
    APUs.
- **Shallow layers.** The published design maps layers with fewer input
  channels than histogram bins (typically the RGB first layer) in the
  conventional way and quantizes them statically to 8 bits. Here such layers
  use the same group mapping as the others, and the ReDy bypass gives the
  same 8 bits.
- **ReDy unit timing.** The published unit is characterised by a 2.19 ns
  latency but no cycle schedule. This design bins one activation per cycle
  and needs 10 further cycles per group. The number of units needed to hide
  that latency is a parameter (`N_REDY`).
- **Activation and pooling.** Only ReLU and max pooling are built. The
  published chip also offers sigmoid and average pooling.
- **Analog parts.** There are no DAC, sample-and-hold or analog multiplexer
  circuits; their function is folded into the APU's digital schedule. The
  crossbar is ideal: no noise, IR drop or device variation.
- **Weights and signs.** Weights are unsigned 8-bit codes. Signed weights
  would need the usual offset or dual-array scheme on top.
- **This design's own choices.** The paper does not give the following, and
  they were chosen here:
  - number formats of the scale, offset and DU fraction;
  - rounding rules;
  - the subsampling pattern;
  - the ED table;
  - all handshakes and buffer layouts.

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares the
block against independent reference functions in `tb/tb_ref_pkg.sv`, which
implement the same behaviour procedurally:

- histogram and DU computation;
- threshold decode;
- real-valued quantization;
- a bit-level crossbar/ADC model with clipping;
- integer-to-FP32 conversion.

Where the design defines a latency, the cycle count is checked as well.

`tb_redy_chip` runs the whole chip at its default size with no parameter
overrides. It runs three layers:

| layer | shape | what it exercises |
|---|---|---|
| first | 3 channels, 9 groups | bypass to 8 bits and ReDy stalls, with 2:1 max pooling |
| second | 64 channels, 6 groups | activations built to hit every precision 3..8 |
| third | second layer's shape | 2:1 subsampled histograms |

It checks every reported precision and every output word. It counts stalls,
bypassed groups, each precision, subsampled groups, ReLU clamps, pooled
outputs and ADC clipping, and fails if any of them never occurred. It takes
about a minute of simulation.

To run a testbench with Verilator (two-state, random initial values):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_redy_chip \
  rtl/redy_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_redy_chip.sv -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Each testbench ends by printing `TB_RESULT checks=N failures=M`. The
block-level testbenches `tb_pe`, `tb_tile` and `tb_pool_unit` override sizes
(16×16 crossbars, 4 ADCs) to stay short. `tb_apu` runs a full 128×128 APU.

## Files

| file | content |
|---|---|
| `rtl/redy_pkg.sv` | constants and configuration structs |
| `rtl/redy_hm.sv`, `redy_em.sv`, `redy_pdem.sv`, `redy_ctrl.sv`, `redy_unit.sv` | the ReDy unit |
| `rtl/uniform_quant.sv` | FP32 → p-bit quantizer |
| `rtl/reram_xbar.sv`, `adc.sv` | behavioural crossbar and ADC |
| `rtl/apu.sv`, `pe.sv`, `tile.sv`, `accum_unit.sv` | compute hierarchy |
| `rtl/act_unit.sv`, `pool_unit.sv`, `global_buffer.sv` | chip post-processing and storage |
| `rtl/redy_chip.sv` | top level and layer controller |
| `tb/` | one testbench per block, plus the reference package |
