# Streaming random-valued impulse noise filter for 8-bit grey-scale images

Random-valued impulse noise replaces a fraction of an image's pixels with
arbitrary grey levels. A noisy pixel can have any value, so a threshold on
the value alone cannot find it. The filter here looks at each pixel's
neighbourhood instead. Each neighbourhood is classed as an **edge**, a
**noisy edge**, a **disordered** area or a **smooth** area, and each class
gets its own restoration:

* Pixels judged clean pass through unchanged.
* Pixels judged noisy are replaced by a median or mean taken along the
  local structure, so edges are kept sharp.

The algorithm is the one published by HosseinKhani et al., *Real-Time Impulse
Noise Removal from MR Images for Radiosurgery Applications*. It targets MR
slices of 256 x 256 pixels, 8 bits each. This RTL implements it as a
pipeline that takes one pixel per clock in raster order. Two filter passes
are chained, as in the published results. Everything is synthesizable
SystemVerilog; the only memory is one row buffer per pass.

## 1. What happens to one pixel

Every decision is made on the 5 x 5 window around the pixel. Pixels are
numbered P1..P25 row by row, with P13 as the centre. The inner 3 x 3 block
(P7 P8 P9 / P12 P13 P14 / P17 P18 P19) is the "3 x 3 window". Within it the
centre is called P5 and the sorted values are F1 <= ... <= F9.

```
Type1 edge?  (F5-F4 > T1  or  F6-F5 > T1)
 |-- yes --> Type2 noisy edge?  (min over 4 directions of D > T2)
 |            |-- yes --> Type2 edge-preserve filter            [NOISY_EDGE]
 |            `-- no  --> similar? --yes--> keep                [EDGE_KEPT]
 |                                 `-no---> Average             [EDGE_AVG]
 `-- no  --> disordered?  (|P5-F4|, |P5-F5|, |P5-F6| all > T3)
              |-- yes --> Type1 edge-preserve filter            [DISORDER]
              `-- no  --> noisy?  (F9-P5 < T4  or  P5-F1 < T4; pass 2 only)
                           |-- yes --> similar? --yes--> keep   [SMOOTH_KEPT]
                           |                    `-no---> Average [SMOOTH_AVG]
                           `-- no  --> keep                      [SMOOTH_CLEAN]
similar  =  at least T5 of the 8 neighbours are within T4 of the centre (|Pi-P5| < T4)
```

The default thresholds are T1 = 20, T2 = 150, T3 = 30, T4 = 10 and T5 = 6,
the values of the published experiments. With these values the `EDGE_KEPT`
branch cannot occur. Seven values within 9 of the centre must include F4,
F5 and F6, so neither gap around the median can exceed 20. Larger T4
values do reach it.

The hardware evaluates every test and every restoration in parallel. The
multiplexer in `image_formation` then picks the branch's result, so the
tree above describes a selection, not a sequence of steps. Each output pixel
comes with its class (`nr_pkg::pix_class_e`), which helps with debugging and
statistics.

## 2. The detectors

| module | rule | circuit |
|---|---|---|
| `sorter9` | sort P1..P9 into F1..F9 | odd-even transposition network: 9 layers of compare-and-swap |
| `type1_edge_detector` | F5-F4 > T1 or F6-F5 > T1 | 2 subtractors, 2 comparators, OR |
| `disorder_analyzer` | \|P5-Fk\| > T3 for k = 4, 5, 6 | 3 ABS-DIF, 3 comparators, AND |
| `noisy_pixel_checker` | F9-P5 < T4 or P5-F1 < T4 | 2 subtractors, 2 comparators, OR |
| `similarity_checker` | #{i : \|Pi-P5\| < T4} >= T5 | 8 ABS-DIF, 8 comparators, adder tree, comparator |
| `type2_edge_detector` | D_min > T2 | 16 ABS-DIF, 8 one-bit shifters, 4 adders, min, comparator |

The Type2 detector asks whether the centre fits any straight line through
it. For each of the four directions it forms

    D = |P13 - near1| + |P13 - near2| + (|P13 - far1| >> 1) + (|P13 - far2| >> 1)

The two pixels next to the centre count fully and the two at distance 2
count half. The four directions and their pixels are:

| direction | near pixels | far pixels |
|---|---|---|
| horizontal (0) | P12, P14 | P11, P15 |
| vertical (1) | P8, P18 | P3, P23 |
| diagonal (2) | P7, P19 | P1, P25 |
| anti-diagonal (3) | P9, P17 | P5, P21 |

A small D_min means some direction agrees with the centre, so the pixel is a
genuine edge pixel. A large D_min marks it as an impulse sitting on an edge.

## 3. The restorers

* **Average** (`averaging_module`): floor((F4+F5+F6)/3), the mean of the
  three middle sorted values.
* **Type2 edge-preserve filter** (`type2_epf`, used for noisy edges): this
  filter ignores the centre. For each direction it takes the four line
  pixels, their mean m (rounded down) and their spread
  `VAR = sum |p - m|` (`var_unit`). The line with the smallest VAR is taken
  to follow the edge. Its median, the rounded-down mean of its two middle
  values (`median4`), replaces the centre.
* **Type1 edge-preserve filter** (`type1_epf`, used for disordered blocks):
  of the four opposite-neighbour pairs of the 3 x 3 block, (P4,P6),
  (P2,P8), (P1,P9) and (P3,P7), the pair with the smallest difference wins.
  Its rounded-down mean replaces the centre. The published algorithm takes
  this filter from earlier work and says only that it averages two pixels
  along the edge direction. This circuit is the simplest one that does
  that, and it is the part of the design least tied to the original.

When two directions tie, the lowest index wins, in the order horizontal,
vertical, diagonal, anti-diagonal.

## 4. Streaming: window, timing and flow control

`denoise_stage` runs one pass over a frame of `IMG_W x IMG_H` pixels.

* **Window.** `line_buffer` is one `IMG_W`-word memory. Each word holds the
  four pixels of one column from the last four rows. Reading a word and
  writing it back shifted by one row makes four chained row delays. Together
  with the incoming pixel it feeds the right-hand column of a 5 x 5 register
  window. After the pixel with linear index n has been shifted in, the window
  centre holds pixel n - (2*IMG_W + 2).
* **Core.** `denoise_core` (sections 1 to 3) is combinational from the
  window registers to a single output register.
  A pass never writes restored values back into its own window, so every
  decision in a pass sees only that pass's input image. Feedback of this
  kind is not described for the algorithm, and the second pass serves that
  purpose.
* **Borders.** Pixels within two of any frame edge have no complete window.
  They are passed through unchanged and get class `BORDER`. Windows that
  wrap across a row boundary occur only for these pixels.
* **Flow control.** Both sides use valid/ready. The stage advances one step
  when its output register is empty or is being read, so `out_ready` stalls
  the whole pass. After the last pixel of a frame, the stage *drains*: it
  shifts in 2*IMG_W + 3 zeros to push out the last two rows. During the
  drain, `in_ready` is low and `draining` is high.
* **Timing.** Latency is 2*IMG_W + 3 cycles. A frame occupies a pass for
  IMG_W*IMG_H + 2*IMG_W + 3 cycles: 66,051 for 256 x 256, or 1.5 % over one
  cycle per pixel. `out_last` marks a frame's last pixel.

An assertion in `denoise_stage` checks that a stalled output stays stable.

## 5. Two passes

`impulse_denoiser` is the top module. It chains `PASSES` (default 2) stages,
each consuming the output stream of the one before. Frames can follow each
other back to back.

In the first pass the noisy-pixel check is switched off (`NPC_EN` bit 0 = 0).
A smooth pixel that is not disordered is then kept as it is. The reason is
density: with many impulses around it, a pixel is rarely found similar to
its neighbours, so the check would mostly trigger averaging. The second pass
sees a much cleaner image and enables the check. The thresholds are one
struct parameter `THR` (type `nr_pkg::thr_t`), shared by all passes.

| parameter | default | meaning |
|---|---|---|
| `IMG_W`, `IMG_H` | 256, 256 | frame size |
| `PASSES` | 2 | number of chained passes |
| `NPC_EN` | 2'b10 | per pass: noisy-pixel check enabled |
| `THR` | T1..T5 = 20, 150, 30, 10, 6 | thresholds |

Ports of the top: `clk`, `rst_n` (asynchronous, active low),
`in_valid/in_ready/in_pixel[7:0]`, `out_valid/out_ready/out_pixel[7:0]`,
`out_class[2:0]`, `out_last` and `pass_draining[PASSES-1:0]`.

Per pass, coarse synthesis gives about 750 word-level cells, 56 flip-flop
bits and 8.5 kbit of storage. The storage is the 8 kbit row memory plus the
window registers.

## 6. Where this RTL fills gaps or departs from the published description

The published text, its equations and its figures disagree in a few places.
These are the choices made here:

* **Weight in the Type2 sum.** The equation writes the 1/2 weight inside the
  absolute value, |Ic - W*Ij|. The hardware description applies it to the
  absolute difference (ABS-DIF, then a shifter), and so does this RTL. Only
  that reading classifies the published edge example as an edge.
* **Similar vs. non-similar.** One sentence says similar pixels are averaged.
  The block diagram sends *similar* pixels out unchanged and *non-similar*
  ones to the Average filter, and this RTL follows the diagram.
* **Worked example values.** The published worked example cannot be
  reproduced at the published thresholds in four places. Its noisy-smooth
  block exceeds T3 on all three differences yet is shown as not disordered.
  Its edge block has only two neighbours within T4 yet is shown as similar.
  The Type1 filter result is printed as the unchanged centre. The Type2
  filter result (53) is not a median of the highlighted line. The RTL
  follows the equations. The testbenches check the parts of the example that
  are consistent: the sorted blocks, the edge and disorder decisions, the
  Average result of 101, and the pixels chosen by both edge-preserve filters.
* **This design's own choices.** The following are not specified by the
  published description:
  * the sorter network and the Type1 edge-preserve filter circuit;
  * every rounding (Average, VAR mean, four-value median, pair mean);
  * strict `<` in the similarity test;
  * tie-breaking between directions;
  * border pass-through;
  * the streaming interface, row buffer, drain and flow control;
  * the threshold field widths (T2 10 bits, T5 4 bits, others 8 bits);
  * switching the noisy-pixel check off in pass 1. The source says only
    that the check "does not function" in the first iteration.
* **Timing.** The original FPGA build reports a single combinational delay
  (49.25 ns on a Virtex-4). This design is likewise one combinational core
  per pass with one register after it. It is not pipelined further, and its
  area and delay have not been measured against that figure.

## 7. Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.
`tb/nr_ref_pkg.sv` is an independent behavioural model of the filter. It is
written with (row, column) offsets and plain loops, not index tables, and
it also contains a frame-level reference and a synthetic test image.

* **Detector and restorer testbenches.** These cover the worked-example
  values listed above, the threshold boundaries and thousands of random
  inputs.
* `tb_denoise_core` runs 20,000 windows against the reference. It uses
  several neighbourhood shapes and both threshold sets, and it requires
  every class to occur.
* `tb_denoise_stage` runs three 20 x 14 frames with random input gaps and
  output back-pressure. It checks every pixel, its class and `out_last`.
  It also checks that an unstalled frame takes exactly
  IMG_W*IMG_H + 2*IMG_W + 2 cycles from the first input to the last output.
* `tb_impulse_denoiser` runs the top at its default size: six 256 x 256
  frames of a synthetic head-slice phantom. The noise densities are 5, 10,
  15, 20, 30 and 40 %. Both passes are compared pixel by pixel with the
  reference filter applied twice. The test also counts:
  * drain stalls;
  * back-pressure cycles;
  * every reachable class;
  * that pass 1 never applies the noisy-pixel check.

  It takes a few seconds in Verilator. PSNR against the clean phantom
  improves as follows:

  | noise | noisy | filtered |
  |---|---|---|
  | 5 % | 20.4 dB | 30.8 dB |
  | 10 % | 17.3 dB | 28.4 dB |
  | 15 % | 15.5 dB | 26.7 dB |
  | 20 % | 14.4 dB | 25.9 dB |
  | 30 % | 12.6 dB | 23.7 dB |
  | 40 % | 11.3 dB | 21.8 dB |

  These numbers are not comparable with the published PSNR (about 34 dB at
  20 %). The phantom has hard synthetic edges, and the two-pixel frame
  border keeps its noise because it is passed through.

To simulate with Verilator, for example the top:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_impulse_denoiser \
    rtl/nr_pkg.sv tb/nr_ref_pkg.sv tb/tb_impulse_denoiser.sv
./obj_dir/Vtb_impulse_denoiser
```

For another testbench, replace its name. `nr_pkg.sv` must be read first, and
`nr_ref_pkg.sv` as well for the testbenches that import it. To change the
frame size, the number of passes or the thresholds, override the parameters
of `impulse_denoiser`. The testbenches' references take the same values as
arguments.

## 8. Files

`rtl/` contains:

* `nr_pkg` (types, thresholds, classes);
* `abs_dif`, `sorter9`, the detectors and restorers of sections 2 and 3,
  and `median4`, `var_unit`;
* `image_formation` and `denoise_core`;
* `line_buffer` and `denoise_stage`;
* the top, `impulse_denoiser`.

`tb/` contains one `tb_<module>.sv` per module, plus `nr_ref_pkg.sv`.
