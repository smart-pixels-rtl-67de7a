# Smart pixels: an in-pixel neural network that filters clusters at the sensor

A pixel detector at a 40 MHz collider produces far more hits than can be read
out. Most of them come from low transverse momentum (pT) tracks that curl in
the magnetic field and are of little interest to a trigger. This readout chip
decides, inside the pixel matrix and within one bunch crossing, whether the
charge cluster left by a particle looks like a high-pT track. Only those
clusters need to leave the matrix.

Each matrix has 256 pixels. Every pixel digitises its charge with a 2-bit flash
ADC. The pixel values of each of the 16 rows are added. A small fully connected
network (16 inputs, 58 hidden ReLU neurons, 3 outputs) then sorts the cluster
into one of three classes:

| code | class (`pt_class_e`) | meaning                      | action  |
|------|----------------------|------------------------------|---------|
| 0    | `CLS_POS_LOW`        | positive charge, pT < 200 MeV | reject  |
| 1    | `CLS_NEG_LOW`        | negative charge, pT < 200 MeV | reject  |
| 2    | `CLS_HIGH`           | pT > 200 MeV                 | keep    |

Low-pT tracks of opposite charge bend in opposite directions and leave clearly
different cluster shapes, which is why there are two background classes.

The network has no clock. It is plain combinational logic placed between the
analog parts of the pixels. It only switches when the pixel flip-flops change,
that is, when there are hits. The weights and biases are not fixed: they are
loaded through a serial configuration chain.

This RTL describes the digital logic of the second prototype chip. That chip
has two such matrices, which differ only in their analog front end. The analog
front end itself is represented by a behavioural model.

## Data path at a glance

```
 charge ─► pixel_afe ─► 3 comparators ─► pixel_readout (Data[2:0] flip-flops) ─► 2-bit value
            (model)     (thermometer)        │   ▲ scan chain to next/previous pixel
                                             ▼
            16 pixels of a row ─► row_sum (6 bits) ─┐
                                  ... 16 rows ...   ├─► momentum_classifier ─► cls, keep
                                                    │     Dense 16x58 ─► ReLU ─► Dense 58x3 ─► Argmax
             Config In ─► nn_config_regs (4652 bits: w1, b1, w2, b2) ─► Config Out
```

| file                    | what it is                                                   |
|-------------------------|--------------------------------------------------------------|
| `smartpix_pkg.sv`       | sizes, accumulator widths, class enum                        |
| `pixel_afe.sv`          | behavioural model of the analog front end of one pixel       |
| `pixel_readout.sv`      | the three Data flip-flops, scan chain link, 2-bit value      |
| `row_sum.sv`            | adder for one row of 16 pixel values                         |
| `nn_config_regs.sv`     | weight/bias shift register                                   |
| `nn_dense.sv`           | parallel combinational dense layer, used twice               |
| `nn_relu.sv`            | ReLU                                                         |
| `nn_argmax.sv`          | argmax of three scores                                       |
| `momentum_classifier.sv`| the network                                                  |
| `superpixel_matrix.sv`  | one 16 x 16 matrix with its classifier                       |
| `smartpix_roic2.sv`     | the chip: two matrices, daisy-chained weight chain (top)     |

## The pixel

### Analog front end (behavioural model)

The charge on the sensor electrode goes into a charge-sensitive preamplifier.
The preamplifier has a feedback capacitor, active transistor feedback and a
leakage current compensation circuit. Its output is AC coupled into three
auto-zeroed comparators with thresholds Vth[0], Vth[1] and Vth[2]. Together the
comparators form a thermometric 2-bit flash ADC. The larger the charge, the more
comparators fire: 000, 001, 011, 111. All comparators are reset at the end of
each 25 ns bunch crossing. A switch (`test_enable`) can connect a programmable
capacitor array to the input to inject a known charge for calibration.

`pixel_afe` models this in electrons. The integrated charge is
`q_in_e + (test_enable ? q_test_e : 0)`. Comparator `i` is high when that
charge reaches `vth_e[i] + OFFSET_E`, and `az` forces all comparators low.

The model leaves out:
- noise (the measured equivalent noise charge is about 30 e-);
- gain and threshold dispersion (about 100 e- measured), except for the fixed
  offset `OFFSET_E`;
- the leakage current, which the compensation and AC coupling remove anyway;
- the waveform and timing of the signal.

The thresholds are given in equivalent electrons, not volts. The injected
charge is given directly, because the coding of the capacitor array is not
known. The front end was characterised with 400 e- thresholds. The testbenches
use 400, 800 and 1200 e- for the three comparators.

### Pixel flip-flops and readout chain

`pixel_readout` holds the flip-flops Data[2:0]. Comparator `i` feeds Data[i].
The same flip-flops make up three links of a scan chain through the matrix:

```
scan_in (previous pixel) ─► Data[2] ─► Data[1] ─► Data[0] ─► scan_out (next pixel)
```

On each rising clock edge the flip-flops do one of two things:
- with `readout_enable` = 0 they capture the comparators;
- with `readout_enable` = 1 they shift one place along the chain.

The polarity of `readout_enable` is this design's choice. The pixel's 2-bit value
is the number of set Data bits, which is the value a thermometer code encodes.
Counting ones also gives a sensible result if one bit of the code is wrong.

In `superpixel_matrix` the chain runs through the pixels in row-major order.
Pixel (r, c) is link r·16 + c, and pixel 0 is nearest to `scan_in`. Shifting
768 times brings out every bit, starting with pixel 255's Data[0], then its
Data[1] and Data[2], then pixel 254, and so on. Shifting changes the Data bits,
so the classifier output is meaningless during a readout.

## From pixels to network inputs

In each row the 16 pixel values (0 to 3) are added into a 6-bit sum (0 to 48)
by `row_sum`. The 16 row sums (96 bits) are the network inputs. The network
therefore sees a projection of the cluster onto the rows. How that projection
relates to the track direction depends on how the sensor is oriented; the RTL
does not assume anything about it.

The matrix is organised logically as 16 rows of 16 pixels, which is what the
network structure needs. The chip layout draws each matrix as 8 x 32 pixels.
The way layout positions map onto logical rows is not known, so the RTL uses the
16 x 16 arrangement throughout.

## The classifier

`momentum_classifier` chains four combinational stages:

1. `nn_dense` 16 -> 58: `h'[j] = b1[j] + sum_r w1[j][r] * x[r]`, 15-bit signed.
2. `nn_relu`: `h[j] = max(0, h'[j])`, 14-bit unsigned.
3. `nn_dense` 58 -> 3: `s[c] = b2[c] + sum_j w2[c][j] * h[j]`, 24-bit signed.
4. `nn_argmax`: the index of the largest `s[c]`. On a tie the lower index wins.

`keep` = (`cls` == `CLS_HIGH`).

### Number formats

The weight storage holds 4652 bits: 3712 for w1, 232 for b1, 696 for w2 and 12
for b2. These counts mean exactly 4 bits per weight and per bias. The RTL reads
each one as a signed integer from -8 to +7.

The trained network's fixed-point scaling and its activation precisions are not
known. The RTL therefore computes exactly:
- there is no rounding and no requantisation between the layers;
- the biases are added at the least significant bit;
- the accumulators are just wide enough never to overflow.

If the trained network places its binary point elsewhere, the weights can make
up for it only as far as a common scale factor allows. A real weight set that
needs, for example, a bias shifted relative to the products, or a saturating
ReLU, would need these stages changed. The places to change are `nn_dense`
(bias alignment) and `nn_relu` (output width and clipping). The widths are in
`smartpix_pkg`.

### Size

The network takes 58·16 + 3·58 = 1102 small multipliers (4 bits × 6 bits and
4 bits × 14 bits) and their adder trees per matrix. Nothing in it is shared over
time, because it must finish within one bunch crossing.

## Loading weights and biases

`nn_config_regs` is a shift register of 4652 flip-flops per matrix. While
`cfg_shift` is high, each clock edge moves it one place. `cfg_in` enters at the
top bit and bit 0 leaves on `cfg_out`. After a full load, the first bit sent is
in bit 0. Each value occupies 4 bits, least significant bit first:

| field      | bit position in the register                  |
|------------|-----------------------------------------------|
| `w1[h][r]` | `(h*16 + r)*4`                                |
| `b1[h]`    | `3712 + h*4`                                  |
| `w2[c][h]` | `3712 + 232 + (c*58 + h)*4`                   |
| `b2[c]`    | `3712 + 232 + 696 + c*4`                      |

So, to load a matrix, send `w1[0][0]` bit 0 first and `b2[2]` bit 3 last.

On the chip (`smartpix_roic2`) the chains of the two matrices are connected in
series: `cfg_in` -> matrix 0 -> matrix 1 -> `cfg_out`. A complete load is
9304 clocks, and matrix 1's 4652 bits are sent first. Reset clears all weights.
With all weights zero every score is 0, so the argmax gives class 0 (reject).

The bit order, the field layout and the daisy chain are this design's own
choices. Only the field names, their sizes and the Config In / Config Out ports
are part of the original description.

## Timing within a bunch crossing

The clock is the 40 MHz bunch-crossing clock (25 ns).

| when                                 | what                                                   |
|--------------------------------------|--------------------------------------------------------|
| during the crossing                  | front end integrates, comparators fire                 |
| rising clock edge, `readout_enable`=0 | Data flip-flops capture the comparator outputs        |
| after that edge                      | row sums, scores, `cls`, `keep` settle combinationally |
| end of crossing                      | `az` resets the comparators                            |

The latency from capture to class is 0 clock cycles, plus the combinational
delay. Whether that delay fits in 25 ns is a question for the physical design.
`cls` and `keep` are not registered. Whatever takes them must sample them
before the next capture edge.

## Chip top: `smartpix_roic2`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | bunch-crossing clock; asynchronous active-low reset |
| `q_in_e[m][r][c]` | in | 16 | charge in pixel (r, c) of matrix m, electrons (front-end model) |
| `test_enable[m][r][c]` | in | 1 | inject `q_test_e` into that pixel |
| `q_test_e` | in | 16 | injected charge, electrons |
| `vth_e[m][i]` | in | 16 | threshold of comparator i in matrix m, electrons |
| `az` | in | 1 | comparator reset |
| `readout_enable` | in | 1 | 1 = shift the pixel chains, 0 = capture |
| `scan_in[m]`, `scan_out[m]` | in/out | 1 | pixel readout chain of matrix m |
| `cfg_shift`, `cfg_in`, `cfg_out` | in/in/out | 1 | weight chain |
| `row_sums[m][r]` | out | 6 | row sums, mainly for observation |
| `cls[m]`, `keep[m]` | out | 2 / 1 | class and keep flag of matrix m |

The parameter `N_MATRIX` (default 2) sets the number of matrices.

## What is not here

- Transmission of kept clusters to the periphery and off chip. The original
  description names it without detail. `keep`, `cls` and the pixel scan chains
  are brought out as ports instead.
- The "system registers and data movers" around the network. They are only
  named. The weight chain is the only configuration path here.
- Pads, bias generation and the analog circuits themselves (only modelled).
- Trained weights and the physics data. The reported 54 % to 75 % data
  rejection therefore cannot be reproduced with this RTL. It runs any 4-bit
  weight set of the right shape.

## Simulating

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. The reference arithmetic of the network is in
`tb/nn_ref_pkg.sv` and is written independently of the RTL with plain integers.

| testbench | covers |
|-----------|--------|
| `tb_pixel_afe` | threshold rule, injection, comparator reset |
| `tb_pixel_readout` | capture, shift, 2-bit value, one-edge capture |
| `tb_row_sum`, `tb_nn_dense`, `tb_nn_relu`, `tb_nn_argmax` | arithmetic against integer models, extreme values, ties |
| `tb_nn_config_regs` | 4652-clock load, field layout, hold, Config Out order |
| `tb_momentum_classifier` | random networks and inputs; scores, class, keep; all classes |
| `tb_superpixel_matrix` | one matrix end to end |
| `tb_smartpix_roic2` | the chip at default sizes, end to end |

`tb_smartpix_roic2` loads three weight sets through the daisy chain (9304
clocks each, counted). Each set is tilted so that a different class tends to
win. For each set it runs 30 bunch crossings with random clusters, noise hits
and, in every third crossing, injected charge, plus crossings captured under
comparator reset. It checks every row sum, the class and the keep flag, and
shifts out both readout chains to compare all 768 bits of each matrix. It also
counts each mechanism (load, capture, injection, reset, readout, each class,
keep and reject) and fails if one never happened. It runs in well under a
second once built.

To build and run one testbench:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/smartpix_pkg.sv tb/nn_ref_pkg.sv tb/tb_smartpix_roic2.sv \
  --top-module tb_smartpix_roic2 -o sim
./obj_dir/sim
```

The other files are found through `-Irtl -Itb`. Replace the testbench name to
run another one. Verilator has only two signal states, so the testbenches reset
or drive everything they read.
