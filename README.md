# A ternary, batch-norm-free in-RRAM computing macro

## The idea

A binary-activation neural network layer reduces, for each output channel, to
one question: is the weighted sum of the binary inputs plus a bias above
zero? An RRAM crossbar can answer it in the analog domain. Store the weights
as cell conductances, apply the inputs to the word-lines, let the cell
currents add on the bit-lines, and compare two bit-line currents with a sense
amplifier. Then no ADC and no multi-bit partial sums are needed.

A large array makes this fragile in four ways:

- Cell currents vary from cell to cell.
- The summed current is not proportional to the number of conducting cells.
- The bit-lines have IR drop.
- The sense amplifier works only inside a current window and needs a minimum
  difference to decide.

The design described here, from the paper *Hardware-Robust In-RRAM-Computing
for Object Detection*, answers these weaknesses with a few structural choices:

- **Whole convolution in one shot.** The word-line voltage is lowered (0.44 V)
  until one LRS cell carries about 1 µA. All 1024 word-lines can then be on at
  once without passing the 300 µA bit-line limit. A whole 3×3×60 group
  convolution (540 products) therefore adds up on one bit-line in a single
  operation. The nonlinearity of the sum then bends both compared currents
  the same way and barely changes the sign of their difference. It is not
  compounded by adding partial sums afterwards.
- **Ternary weights on a bit-line pair.** Weight +1 is an LRS cell on the
  positive bit-line (G+), −1 is an LRS cell on the negative bit-line (G-), and
  0 is HRS on both. The sense amplifier compares G+ with G-. No shared
  reference bit-line is needed, and only about 20 % of the cells conduct.
- **No batch norm, but a small extra bias.** Dropping batch norm frees the
  96 rows it needed. Only 32 rows hold a per-channel bias, with their input
  tied to 1. The bias pushes the typical |G+ − G-| away from zero, where the
  sense amplifier could not resolve it.
- **HRS = never formed.** The "off" state is an unformed cell (> 1 GΩ, no
  variation). Programming is therefore one-time: a formed cell stays LRS.

This repository gives that macro as SystemVerilog:

- The digital parts (mapping, decoders, control) are synthesizable RTL.
- The analog parts (the cell array and the current-mode sense amplifier) are
  behavioural models. They carry the published nonideal effects, so that a
  network mapped onto the RTL behaves as it would on the macro.

## Array organisation

| item | value |
|---|---|
| array | 1024 word-lines × 1024 bit-lines, 1T1R cells |
| groups | 64, one sense amplifier each |
| bit-lines per group | 16: BL[16g+0..7] form G+, BL[16g+8..15] form G- |
| output channel | one column pair (BL[16g+k], BL[16g+8+k]), k = 0..7 |
| channels stored | 64 × 8 = 512 |
| rows used per channel | WL0..WL31 bias, WL32..WL571 kernel (540 = 3×3×60), WL572..1023 unused |

In a compute operation the bit-line decoder closes the switch of column k on
both sides of every group. Each group's sense amplifier therefore compares
channel g·8+k's G+ current with its G- current. A full input position takes
8 operations to produce all 512 activations, 64 at a time.

The grouping, the G+/G- halves and the bit-line numbering are those of the
published macro drawing. The drawing also shows the per-bit-line switches
BL_IN_EN<0..15>. The drawing does not say which channel sits in which column,
nor that one column per side is enabled at a time. That is this design's
reading, chosen because each sense amplifier has exactly one G+ and one G-
input. The source lines drawn between bit-line pairs (SL[0] .. SL[511]) are
grounded and carry no logic.

Word-line 0 is the one nearest the bit-line driver. The bias rows sit there,
where IR drop is smallest, with the kernel rows right after them.

## One compute operation

For output channel c = g·8 + k, input feature x[0..539] ∈ {0,1}, kernel
weights w[i] ∈ {−1, 0, +1} and bias weights b[j] ∈ {−1, 0, +1} (j = 0..31):

    I+ = Σ_j [b_j = +1]·G(j, G+)  +  Σ_i x_i·[w_i = +1]·G(32+i, G+)
    I- = Σ_j [b_j = −1]·G(j, G-)  +  Σ_i x_i·[w_i = −1]·G(32+i, G-)
    activation = (f(I+) > f(I-))      if the sense amplifier can resolve it
               = random bit            otherwise

Here G(row, side) is the current gain of the cell, 1 for a nominal LRS cell,
and f is the nonlinear bit-line transfer (next section). With ideal cells and
an ideal comparator this is exactly

    activation = (Σ x_i·w_i + Σ b_j > 0)

The bias range is −32..+32 in whole cells. The order of the 540 kernel inputs
on the rows is left to the user; the RTL takes `req_feat[i]` onto word-line
32+i.

## The analog models

The two behavioural models hold everything in the design that is not logic.
Most of the behaviour that matters for accuracy is here.

### Cell array (`rram_array`)

- Each cell stores an 8-bit **gain** in units of 1/32 of a nominal LRS cell.
  HRS cells hold 0.
- When a cell is formed, its gain is drawn once:
  `round(32·exp(σ·N(0,1)))` with σ = 0.42, clamped to 1..255. The normal
  sample comes from a Box–Muller transform of the simulator's random numbers.
  σ is the measured spread of ln(current) at the 0.44 V word-line level. This
  is a fixed random mask on the array, which is how the paper applies
  variation. There is no read-to-read noise.
- With `VAR_SIGMA_MILLI_P = 0` every LRS cell is exactly 32, which gives an
  ideal array.
- Forming happens only on unformed cells. A second programming of the same
  cell changes nothing.
- On `sense`, each group registers the sum of the gains of conducting cells
  (raised word-line, LRS, switch closed) on its G+ side and on its G- side.
  The sums are 21-bit, in 1/32-cell units.

The random draws come from `$urandom`, `$ln`, `$cos` and `$exp`. The array is
therefore a simulation model and will not synthesize. It stands in for an
analog macro in any case.

### Sense amplifier (`tmcsa`)

The published sense amplifier is a triple-margin current-mode design taken
from earlier work. Here it is modelled by what it does to the comparison:

1. **Nonlinear current.** The summed gain is converted to a current with the
   published fit. With p the current in whole cells (rounded),
   `I = (q/32)·ratio(p) µA`, where ratio(p) is the two-piece fourth-order
   polynomial (split at p = 140) given in the paper. ratio(p) is held at its
   p = 540 value beyond 540, the end of the fitted range. ratio(0) = 2.5;
   it falls to 1.37 at 60 cells, about 1 near 100–140 cells and about 0.41 at
   540 cells. The
   polynomial is evaluated in 64-bit fixed point (coefficients × 10^15), so
   this model does synthesize.
2. **Sensing window.** The larger of the two currents must lie in
   35 µA .. 300 µA. Because of the nonlinearity, the lower bound is reached at
   about 18 cells. The upper bound lies beyond 540 cells, which the ternary
   weights (about 20 % LRS) never reach.
3. **Required margin.** |q+ − q-| must be at least the margin for the larger
   side's cell count n. The margin curve is read off the published
   Monte-Carlo plot:

   | n (cells) | 40 | 60 | 80 | 100 | 120 |
   |---|---|---|---|---|---|
   | margin (cells) | 0.8 | 1.2 | 1.9 | 3.0 | 4.0 |

   Between the points the margin is interpolated linearly and rounded up to
   0.1 cell. Below 40 it is constant, and above 120 it follows the last slope.
   These values were read from plotted markers, not from printed numbers, and
   are approximate.
4. **Unresolved outputs.** If the window or the margin test fails, the output
   is the next bit of a 16-bit LFSR. The LFSR is seeded per group and
   advances on every latch. The `resolved` output tells a testbench which case
   it was. It is a model observation, not a pin of the macro.

`SA_MARGIN_ADD` (default 0) adds whole cells to the required margin. It
models a sense amplifier with a wider spread; the published tolerance study
goes up to +3 cells. With `NONIDEAL = 0` the model is an ideal comparator of
the two sums.

The published study applies the sense-amplifier spread as a random offset
drawn from the margin curve. The model here treats it as a dead zone with a
random answer, which is a simplification. Comparing the two nonlinear
currents, instead of the raw sums, reproduces the effect the whole design
relies on. Both sides pass through the same f, so a single-shot comparison
keeps its sign unless the currents are close.

## Programming

A program request writes one word-line:

- `req_row` selects the row.
- `req_weights` carries one 2-bit ternary code per channel (512 codes,
  channel c at bits [2c+1:2c]).

| code | weight | G+ cell | G- cell |
|---|---|---|---|
| 00 | 0 | HRS | HRS |
| 01 | +1 | LRS | HRS |
| 10 | −1 | HRS | LRS |
| 11 | (treated as 0) | HRS | HRS |

`ternary_mapper` turns the codes into the 1024-bit cell pattern of the row.
`wl_decoder` raises only that row and `bl_decoder` drives the pattern. The
array then forms the marked cells in one clock. A layer of 572 rows takes
572 requests. Because forming is one-time, the array must start from its
fresh, all-HRS state. Writing a 0 over a formed cell does not erase it.

## Control and timing

`irc_ctrl` accepts one request at a time on a valid/ready handshake.
`req_ready` is high only when the controller is idle. The request is captured
in the accepting cycle, so the requester may change its fields afterwards.

| operation | cycle after acceptance | state | action |
|---|---|---|---|
| program | 1 | P_FORM | decoders in program mode, `prog_en`; cells formed at the end of the cycle |
| | 2 | IDLE | ready again |
| compute | 1 | C_SENSE | all bias and kernel word-lines up, column `req_col` selected, `sense`; sums registered |
| | 2 | C_LATCH | `sa_en`; sense amplifiers decide |
| | 3 | C_DONE | `rsp_valid` with `rsp_act[63:0]` and `rsp_resolved[63:0]` |
| | 4 | IDLE | ready again |

So a row takes 2 cycles to program, and a compute takes 3 cycles to its
response and 4 cycles between requests. The paper gives no cycle timing,
clock rate or handshake. This sequence is the simplest one that respects the
order *word-lines up → currents settle → SA latches → result out*. Reset is
synchronous and active low. Assertions check that the forming, sensing and
latching strobes never overlap and that every latch is followed by a
response.

## Files

| file | kind | content |
|---|---|---|
| `rtl/irc_pkg.sv` | package | sizes, ternary code `tern_t`, `mode_t`, mapping and bit-line index functions |
| `rtl/ternary_mapper.sv` | RTL | ternary codes of a row → G+/G- cell pattern |
| `rtl/wl_decoder.sv` | RTL | compute: bias rows = 1, kernel rows = feature; program: one-hot row |
| `rtl/bl_decoder.sv` | RTL | compute: BL_IN_EN of one column per side in every group; program: forming pattern |
| `rtl/rram_array.sv` | model | cell gains with log-normal variation, one-time forming, group current sums |
| `rtl/tmcsa.sv` | model | nonlinear current, sensing window, margin, random unresolved output |
| `rtl/irc_ctrl.sv` | RTL | request handshake and operation sequencing |
| `rtl/irc_macro.sv` | top | everything above; 64 sense amplifiers |

Every parameter defaults to the published size: 1024 rows, 64 groups,
8 bit-lines per side, 32 bias rows, 540 kernel rows, σ = 0.42, and a
35–300 µA window. `VAR_SIGMA_MILLI_P` (σ in thousandths) and
`SA_MARGIN_ADD` set the two variation levels the published tolerance study
sweeps. The sizes can be reduced for experiments (for example
`GROUPS_P`, `BL_PER_SIDE_P`, `ROWS_P`), provided 32 + 540 rows still fit, or
`BIAS_ROWS_P`/`CONV_ROWS_P` are reduced as well.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

- `ternary_mapper_tb`, `wl_decoder_tb`, `bl_decoder_tb` check the mapping and
  decoding against independent index arithmetic, exhaustively or with random
  vectors.
- `irc_ctrl_tb` checks the handshake, the strobe sequence and the latencies
  (2 and 3 cycles) above.
- `rram_array_tb` checks:
  - one-time forming: a snapshot of the gains is unchanged by re-forming;
  - the gain statistics, by measuring the mean and standard deviation of
    ln(gain) over many formed cells (about 0.00 and 0.42);
  - the group sums, against sums worked out from the stored gains;
  - an instance with σ = 0, where every gain is one unit.
- `tmcsa_tb` compares the model with a reference written in `real`
  arithmetic, over window edges, margin points and random currents, in both
  modes.
- `irc_macro_tb` runs the full-size macro with default parameters:
  - It programs 572 rows with random weights (about 20 % +1, 60 % 0, 20 % −1)
    and biases −32..+32.
  - It checks the formed cells against the mapping.
  - It runs 64 computes (8 features × 8 columns) and checks every resolved
    activation against a reference built from the cell gains.
  - It checks the 3-cycle latency.
  - It programs one row a second time, with all-zero and then all-+1
    weights, and checks that no cell returns to HRS and formed cells keep
    their gain.
  - It counts how often each mechanism occurred: one-time forming,
    resolved/unresolved outputs, margin failures, low-current failures,
    outputs whose sign the bias changed, column selection, and re-forming.
  - It takes well under a second of simulation time.
- `gconv_layer_tb` runs slices of two consecutive detector layers, both
  stored in one macro.
  - Columns 0–1 hold 128 output channels the size of a GConv Block 128,128,
    over an 8×8 input map.
  - Columns 2–5 hold 256 channels the size of a GConv Block 128/256,256. Their
    input is 60 channels of the first layer's output after 2×2 max-pooling.
  - Columns 6–7 hold the first layer again without extra bias.
  - It runs four macros on the same requests:
    - one ideal (σ = 0, ideal comparator), which must match `sign(Σwx + bias)`
      exactly;
    - one as built, at the published point;
    - two at points of the published tolerance study: σ = 0.44, and the
      margin widened by 3 cells.
  - The macros as built may differ from the exact result only on unresolved
    outputs or where the exact sum is within 16 cells of zero.
  - Typical figures for the first layer at the published point: 6.3 %
    unresolved and 8.5 % flipped with the extra bias, against 7.6 % and
    10.3 % without it.
  - σ = 0.44 changes these rates only slightly. The wider margin turns most
    near-zero flips into unresolved outputs (about 23 % unresolved, 2 %
    flipped).
  - The weights are random rather than trained, so these rates show the
    mechanisms, not the accuracy of the published network.

Each testbench was also run against a deliberately broken copy of its module,
for example with G+ and G- swapped or the low-current limit ignored, and it
reported failures.

## Simulating

With Verilator 5 (the package first, the other modules found by `-y`):

    verilator --binary --timing --assert -Irtl -y rtl rtl/irc_pkg.sv tb/irc_macro_tb.sv --top irc_macro_tb -o sim
    obj_dir/sim

Replace `irc_macro_tb` with any other testbench name. The full-size build
takes a few seconds, and the run is under a second.

## How the layers of the detector map onto macros

The published network is a YOLOv2-style detector with binary group
convolutions (group size 60). It runs IRC macros in six layers: two GConv
Block 128,128 and four GConv Block 128/256,256.

- Each output channel needs 32 + 540 = 572 rows, which fits in 1024.
- Each layer has at most 256 output channels, so one macro holds a layer, and
  an input position takes 2 or 4 compute operations.
- The six layers together (1280 channels) need at least three macros, because
  forming cannot be undone.

The first convolution, the later 512- and 1024-channel blocks, max-pooling
and the detection head are digital in the published system and are not part
of this macro.

## Where this RTL departs from the paper or goes beyond it

- **IR drop is not modelled.** The published evaluation models it with 32-cell
  bit-line sub-blocks calibrated against circuit simulation. Only its effect
  is shown, as a plot, and no wire resistance is given. The row layout (bias
  and kernel nearest the driver) is the design's answer to it and is kept.
- **Bit-line clamp.** The published macro drawing shows a clamping op-amp per
  bit-line side. The text says the design does *not* clamp with an op-amp,
  which is why the current is nonlinear. The model follows the text: no
  clamp, nonlinear current.
- **SA controller.** The sense-amplifier controller is only named, with two
  abbreviations (PWRC and FM), and the text mentions extra switches that
  reduce power. Neither is described, so only the sequencing is built.
- **Column selection and channel placement** (one column per side per
  operation, channel g·8+k) are this design's reading of the drawing.
- **Sense-amplifier spread** is modelled as a dead zone with a random output,
  using margin values read from a plot.
- **Nonlinearity argument.** The nonlinearity ratio is applied to the
  variation-weighted current rounded to whole cells. The paper states the fit
  in numbers of LRS cells.
- **Timing, handshake, codes and widths** are this design's own; the paper
  gives none.
- **Not built:**
  - the baseline macro the paper compares against (binary weights, reference
    bit-line, 96 BN rows, split accumulation);
  - the analog word-line and bit-line drivers;
  - the separate 256×256 RRAM test chip used to measure the cells.
