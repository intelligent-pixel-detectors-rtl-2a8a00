# Smart-pixel readout chip with an on-chip momentum classifier

At a hadron collider a pixel detector sees far more particle hits than it
can send off the chip at the 40 MHz collision rate. Most of those hits come
from low transverse-momentum (pT) tracks, which matter little to a trigger.
This chip decides on the spot: a small neural network next to the pixels
looks at the shape of each cluster of hit pixels and sorts it into one of
three classes:

* low pT of positive charge: rejected,
* low pT of negative charge: rejected,
* high pT: kept for readout.

The two charges get separate classes because in the magnetic field they
bend the opposite way and so leave different cluster shapes.

The network needs no timing information and no x coordinate. It uses the
cluster's **y-profile**: the pixel charges summed row by row over a 16 x 16
pixel matrix. That profile depends on the track's crossing angle, and the
angle depends on pT. Every pixel digitises its charge with a 2-bit flash
ADC. A row of 16 pixels sums to at most 48, so each of the 16 profile
entries fits in 6 bits. The network is dense 16 -> 58, ReLU, dense 58 -> 3,
argmax. All weights and biases are 4-bit integers. They are loaded through a
serial chain and can be changed at any time.

This repository gives synthesizable SystemVerilog for the digital part of
the chip. It covers the pixels' ADC capture logic, the row adders, the
network, the weight memory, the cluster data mover and the 768-register
test chain. Self-checking testbenches come with it. The analog front end
(preamplifier and comparators) is not modelled. Its comparator outputs are
inputs of the top module.

## Chip organisation

```
                 cfg_in ──► weights A ──► weights B ──► cfg_out   (4652 bits each)
                               │              │
thresh[0][256][3] ─► pixel_array 0        pixel_array 1 ◄─ thresh[1][256][3]
                      │                     │
                      └─ out_valid/cls/keep/scores/row_sums/n_clusters (per array)

test_in ──► 768 x DFF ──► test_out
```

`smart_pixel_roic` (top) holds two arrays of 32 x 8 pixels. On silicon each
array is 16 x 4 "super pixels" of 2 x 2 pixels, with the digital logic laid
out between the analog islands. Logically each array is a 16 x 16 matrix
with its own classifier. Inside `pixel_array`, pixel *p* (0..255) belongs to
matrix row *p* / 16. This mapping from the physical 32 x 8 positions is a
choice of this design; if the real pixel-to-row wiring differs, only the
slicing in `pixel_array` changes.

```
pixel p: thresh[p] ─► adc_capture ─► code (2b) ┐
                                               ├─ row_sum (16 codes) ─► 6b ─┐
                       ... 16 pixels per row ──┘                           │ x16
   any_hit / any_busy ─► readout_ctrl ─► fire (clear pixels, in_valid) ────┤
                                                                           ▼
weight_config ─► w1,b1,w2,b2 ─► momentum_classifier: dense 16x58 ─► ReLU ─►│reg│
                                                     dense 58x3 ─► argmax ─►│reg│─► cls, keep
```

## From comparator pulses to a cluster

The ADC is a thermometric flash converter. Three comparators watch the
preamplifier output, and `thresh[k]` is high while the signal is above
threshold k+1. Because the code is thermometric, the result can be tracked
while the pulse is still rising. `adc_capture` does this:

1. The comparator bits pass a two-flop synchroniser.
2. A conversion starts on a rising edge of the first comparator.
3. While the conversion window is open (`busy`), the held code follows the
   highest level seen.
4. The window closes at the first of three events:
   * the code reaches full scale (3);
   * the level falls below the held code, so the signal has passed its peak;
   * `CONV_CYCLES` clocks (default 4) have passed.
5. The code then stays on the output with `hit` set until it is cleared.

Each pixel therefore reports the peak level of its pulse. An exception is a
pulse that is still rising when the window closes: it reports the level
reached by then.

A cluster is simply the set of pixels that fired together. `readout_ctrl`
moves it once some pixel holds a result and no pixel is still converting.
It then pulses `fire` for one clock. In that clock the 16 row sums enter the
classifier, and at the same clock edge every pixel is cleared. Pixels that
start more than one conversion window after the others become a separate
cluster. A pulse that is still above threshold after the clear does not
restart its pixel, because a conversion needs a rising edge.

Timing per cluster, in clocks after the first comparator edge:

| step | clocks |
|---|---|
| synchroniser | 2 |
| start of conversion | 1 |
| conversion window | 1 to `CONV_CYCLES` |
| transfer (`fire`) | 1 |
| classifier pipeline | 2 |

At most about one cluster every 6 clocks can be taken per array, since the
conversion window and the transfer dominate.

## The network and its number formats

`momentum_classifier` computes everything in parallel: 928 + 174
multipliers, with no time sharing. Each of the 58 hidden neurons and 3
outputs has its own adder tree. It has two register stages. The ReLU
outputs are registered, then the class, keep flag and scores. So a result
appears **2 clocks after `in_valid`**, and a new cluster can enter every
clock.

The arithmetic is exact integer arithmetic. The widths are chosen so that
nothing can overflow (`pixnn_pkg::acc_bits`):

| signal | format |
|---|---|
| row sum (input) | unsigned, 6 bits |
| weights, biases | two's complement, 4 bits, range -8..7 |
| hidden accumulator | signed, 15 bits (16 x 63 x 8 + 8 < 2^14) |
| ReLU output | unsigned, 14 bits (no requantisation) |
| class score | signed, 24 bits (58 x 16383 x 8 + 8 < 2^23) |
| class | 2 bits: 0 = low pT +, 1 = low pT -, 2 = high pT |
| keep | 1 when class = 2 |

The bias is added at the scale of the products. On a tie the argmax takes
the lower class index.

What is known and what is chosen:

* Known: the 4-bit width follows from the weight-memory sizes, for example
  3712 bits for 16 x 58 weights.
* Chosen here: the integer interpretation, the bias scale, the ReLU without
  requantisation, the tie rule and the class numbering.

A network trained with fractional fixed-point formats maps onto this
hardware by scaling: choose the weight and bias LSBs so that they are
integers. Then pick class scores that keep the same argmax. A network
whose hidden activations were truncated or saturated between the layers
would need `nn_relu` changed to match.

## Weight memory and its loading order

Each array's `weight_config` is a 4652-bit shift register. Counted from its
output end (bit 0), the fields are:

| field | bits | bit offset of element |
|---|---|---|
| w1 | 3712 | [o][i] at (o*16 + i)*4 |
| b1 | 232 | [o] at 3712 + o*4 |
| w2 | 696 | [c][o] at 3944 + (c*58 + o)*4 |
| b2 | 12 | [c] at 4640 + c*4 |

While `cfg_en` is high the chain shifts one bit per clock from `cfg_in`
towards `cfg_out`. The two arrays are daisy-chained: chip `cfg_in` feeds
array 0, and array 0's output feeds array 1.

To load the chip, shift 9304 bits. Send **array 1's image first**, bit 0
first, then array 0's image. The old contents come out of `cfg_out` in the
same order, so a read-back shows what was loaded. The weights change while
the chain shifts, so load the weights while no clusters are arriving.
`pixnn_ref_pkg::pack` in `tb/` builds an image from integer weights.

## Test chain

`test_shift_chain` is 768 flip-flops in series, with enable `test_en`. A bit
sent into `test_in` shows at `test_out` exactly 768 clocks later. Sending a
pattern and looking for it 768 clocks later, at the intended clock rate,
checks the chip for setup and hold violations. In this design the chain is
separate from the weight chain; what the real chip's 768 registers hold
otherwise is not known.

## Files

`rtl/`: one module or package per file.

| file | content |
|---|---|
| `pixnn_pkg.sv` | sizes, widths, `cls_e` class codes |
| `adc_capture.sv` | per-pixel thermometer capture and conversion window |
| `row_sum.sv` | 16-input adder of 2-bit codes |
| `nn_dense.sv` | fully parallel dense layer, parameterised |
| `nn_relu.sv` | ReLU |
| `nn_argmax.sv` | argmax |
| `momentum_classifier.sv` | the network with its two pipeline stages |
| `weight_config.sv` | serial weight and bias memory |
| `readout_ctrl.sv` | cluster trigger and counter |
| `pixel_array.sv` | 256 pixels, 16 row sums, controller, weights, classifier |
| `test_shift_chain.sv` | 768-register test chain |
| `smart_pixel_roic.sv` | top: two arrays, daisy-chained weights, test chain |

`tb/`: one self-checking testbench per module (`tb_<module>.sv`), plus
`pixnn_ref_pkg.sv`. That package is an integer model of the network, a
random weight generator and the weight-image packer. Each testbench prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.
`tb_smart_pixel_roic` runs the whole chip at its default size:

* three weight loads through the daisy chain, with read-back;
* 36 clusters per array, 12 of them identical in both arrays, with
  profiles, scores and classes checked;
* three test-chain pulses.

It counts each mechanism (kept cluster, both rejects, the three ways a
conversion ends, staggered pixel starts, both arrays finishing in the same
clock, the 768-clock delay) and fails if any never occurs.

Three modules carry concurrent assertions that hold in any use:

* `adc_capture`: a result is never held while its conversion runs, and the
  window never outlasts `CONV_CYCLES`;
* `momentum_classifier`: each input gives exactly one result, 2 clocks later;
* `readout_ctrl`: a cluster is never moved while a pixel is converting.

Build with `--assert` to check them.

Simulating with Verilator 5, for example the top:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/pixnn_pkg.sv tb/pixnn_ref_pkg.sv tb/tb_smart_pixel_roic.sv \
  --top-module tb_smart_pixel_roic -Mdir obj -o sim && obj/sim
```

It runs in well under a second. For a block testbench, swap in its
`tb_<module>.sv`; `-y rtl` finds the modules it uses. Lint with
`verilator --lint-only -Wall -Irtl rtl/pixnn_pkg.sv rtl/<module>.sv`.
It reports only unused package constants, plus a note in the modules
with assertions that `rst_n` is both an asynchronous reset and the
assertions' disable condition.

Size after generic synthesis of the top: about 19,400 flip-flops.

| part | flip-flops |
|---|---|
| weight chains | 9304 |
| test chain | 768 |
| pixel capture logic | 512 x 14 |
| classifier pipelines | the rest |

The combinational network is about 1100 multipliers per array, all 4-bit by
6- to 14-bit.

## Where this design departs from, or goes beyond, the published chip

* **Number formats.** The published network was quantised and converted by a
  high-level-synthesis flow. Its fixed-point formats are not known, so
  exact integers are used here (see above).
* **Pipeline.** The published chip's pipeline depth, latency and clock
  frequency are not known; the 2-clock latency is this design's own. The design is meant to run at the 40 MHz collision rate,
  and has so far been tested on silicon at 10 MHz.
* **ADC capture.** The conversion-window length, the synchroniser and the
  peak detection are choices of this design. The real conversion is done
  partly in the analog island.
* **Data movement.** The cluster trigger (`readout_ctrl`) and the
  profile/score outputs stand in for the chip's unpublished "system
  registers and data movers". Nothing downstream of the keep decision is
  modelled, such as cluster buffering or serial readout of kept clusters.
* **Weight memory** as a plain flip-flop shift chain, its bit order, and the
  daisy-chaining of the two arrays.
* **Test chain** as a separate dedicated 768-flip-flop chain.
* **Matrix mapping.** The 32 x 8 layout is mapped to the 16 x 16 matrix row
  by row (pixel p -> row p/16).
* **Not modelled.** The analog front end (preamplifier, AC coupling,
  comparators and their thresholds), radiation hardening, power figures and
  the test stand.
