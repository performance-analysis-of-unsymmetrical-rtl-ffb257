# Unsymmetrical trimmed median filter: 3x3 window hardware

This is synthesizable SystemVerilog for a *switching* median filter that removes
impulse noise from 8-bit grey-scale images. It works on one 3x3 window at a time.
Unlike a plain median filter, it replaces the centre pixel only when that pixel
looks like an impulse. The test compares the pixel with the **unsymmetrical
trimmed median** (UTMED) of its window. UTMED is the median of the window pixels
that are neither 0 nor 255, since 0 and 255 are the values salt-and-pepper
noise takes. A second test checks whether the window median can itself be
trusted. Only if it cannot does the trimmed median replace the pixel.

The design follows the architecture published by K. Vasanth and S. Karthik in
"Performance Analysis of Unsymmetrical Trimmed Median as Detector on Image
Noises and its FPGA Implementation": a sorting network built from three-input
sorters, a memory array, an eight-state FSMD (finite-state machine with
datapath) and an output decision stage. The RTL is an independent
implementation, not the authors' VHDL. Where it departs from the publication,
this is stated below.

## The filtering rule

For a window with centre pixel `P`, sorted pixels `S[0..8]` and median
`Smed = S[4]`:

1. Count the 0s (`F`) and the 255s (`L`) in the window.
2. Special cases, when every pixel is 0 or 255:
   * all 0 gives 0;
   * all 255 gives 255;
   * a mix gives the window mean, `floor(L*255/9)`, read from a table
     (255, 226, 198, 170, 141, 113, 85, 56, 28, 0 for 0..9 zeros).
3. Otherwise the trimmed array is `S[F .. 8-L]`, with `m = 9-F-L` pixels.
   UTMED is its median:
   * `S[F + (m-1)/2]` when `m` is odd;
   * `(S[F+m/2-1] + S[F+m/2]) / 2`, rounded down, when `m` is even.
4. Decision, with `T = 40` and `T1 = 20`:
   * `|P - UTMED| <= T`: the pixel is clean and is kept;
   * otherwise, if `|Smed - UTMED| <= T1`: the pixel is replaced by `Smed`;
   * otherwise the median is noisy too, and the pixel is replaced by UTMED.

Worked example. Take the window `177 0 0 / 205 255 187 / 155 25 124`. Sorted,
it is `0 0 25 124 155 177 187 205 255`, so `F=2`, `L=1` and `Smed=155`. The
trimmed array is `25 124 155 177 187 205`, and UTMED = (155+177)/2 = 166. Then
|255-166| = 89 > 40, so the centre pixel is noisy. But |155-166| = 11 <= 20,
so the median is usable and the output is 155.

## Sorting: the snake shear network

The sorter (`snake_sorter`) is the heart of the area savings the design aims
for. Every cell is a `three_cell_sorter`: three values in; minimum, middle and
maximum out. The nine pixels form a 3x3 matrix, and five stages act on it:

| stage | operation | sorters |
|---|---|---|
| 1 | rows: row 1 ascending, row 2 **descending**, row 3 ascending (snake) | 3 |
| 2 | columns ascending, top to bottom | 3 |
| 3 | rows again, snake directions | 3 |
| 4 | columns again | 3 |
| 5 | "semi-diagonals": cells (1,2),(1,3),(2,3) ascending, and cells (2,1),(3,1),(3,2) ascending | 2 |

The result is read in snake order: row 1 left to right, row 2 right to left,
row 3 left to right. For the window `99 72 197 / 9 11 111 / 121 8 27`, the
matrix after the last stage is `8 9 11 / 99 72 27 / 111 121 197`, which reads
as `8 9 11 27 72 99 111 121 197`.

**A correction.** Two shear phases and the two semi-diagonal sorts, 14 cells
in all, do **not** sort every window. The smallest three and the largest three
ranks always come out right. The three middle ranks, all in the middle row and
including the median, can come out of order:

* 18 of the 512 windows of 0s and 1s are left unsorted;
* about 14% of random windows are left unsorted;
* the worked example above comes out with a median of 124 instead of 155.

The algorithm needs a sorted array, because the scheduler indexes it by rank.
So by default a fifteenth three-cell sorter orders the middle row after the
semi-diagonal sorts. This is the final row phase of textbook shear sort. An
exhaustive 0/1 test shows that the network then sorts every window (by the 0/1
principle this covers all inputs). The extra sorter shares stage 5 with the
semi-diagonal sorts, so the latency does not change.

`FINAL_ROW_SORT=0` gives the 14-cell network exactly as published.
`tb_snake_sorter` runs both versions side by side.

Each stage is followed by a register (`REG_STAGES=1`). A window can enter every
clock, and the sorted result appears after the fifth edge. The publication
gives no pipelining. It is assumed here because it fits the reported figures:
first output after 13 clocks and a clock near 80 MHz. Those figures cannot
both hold with a fully combinational sorter, which was reported at 77 ns.
`REG_STAGES=0` makes the network purely combinational.

## The FSMD scheduler

The sorted window is held in `memory_array` (nine 8-bit registers plus the
centre pixel). `fsmd_scheduler` then runs through its states, one clock each:

| state | work | next |
|---|---|---|
| IDLE | clear F, L, sum; wait for a window | DAT1 |
| DAT1 | count 0s into F and 255s into L, all nine pixels at once | IDLE with output 0 if F=9, or 255 if L=9; else INDEX |
| INDEX | if F+L=9, output the table mean; else compute the trimmed-median rank indices (odd, or even_u/even_v) | IDLE, or DECISION |
| DECISION | sum = ro[even_u]+ro[even_v], or ro[odd] | OUT_EVEN if m is even, OUT_ODD if odd |
| OUT_EVEN | UTMED = sum/2 | FINAL |
| OUT_ODD | UTMED = ro[odd] | FINAL |
| FINAL | latch centre, UTMED and median together | OUTPUT_FINAL |
| OUTPUT_FINAL | decision unit; op registered in the first cycle; held while getcnt counts 0,1,2 | IDLE |

The publication builds the rank indices as a lookup table over the possible
(F, L) pairs. The RTL computes the same indices with 4-bit adders.

`decision_unit` holds the two absolute-difference comparators and the 3-way
multiplexer. It is combinational, and the scheduler registers its output.
`T` and `T1` are parameters. The publication quotes 40 and 20 for its output
stage, and reports good results for T between 20 and 40 and T1 between 15 and
30.

## Top level: `utmf_top`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst` | in | clock; synchronous, active-high reset |
| `ip11 .. ip33` | in | window pixels, row then column; `ip22` is the centre |
| `valid_i` / `ready_o` | in / out | a window is taken on an edge where both are high |
| `op_o`, `op_valid_o` | out | output pixel; `op_valid_o` pulses for one cycle, `op_o` holds |
| `kind_o` | out | how `op_o` was chosen: kept, median, UTMED, all 0, all 255, table |
| `ro[0..8]`, `median_o`, `utmed_o`, `f_o`, `l_o`, `state_o` | out | observation: sorted window, median, trimmed median, counters, state |

Timing, counting the edge that takes the window as edge 1:

* edges 1-5: the five sorter stages;
* edge 6: the memory array is loaded;
* edges 7-12: IDLE, DAT1, INDEX, DECISION, OUT_x and FINAL;
* edge 13: `op_o` and `op_valid_o` are registered, which matches the
  13-clock first output of the publication.

Windows made only of 0s and 255s finish at edge 8 (all the same value) or 9
(a mix).

Only one window is processed at a time. `ready_o` falls when a window is taken
and rises after `op_valid_o`. With windows offered back to back, one is taken
every 14 clocks on the full path. That is about 5.7 M pixels/s at 80 MHz, or
46 ms for a 512x512 image.

The design stops at the window. Forming windows from an image stream (line
buffers, border handling) is not part of the published architecture and is
left to the user. The testbenches form windows in software.

## How far it can be trusted

Every module has a self-checking testbench that compares it with models
written separately in `tb/utmf_ref_pkg.sv` (a plain insertion sort, a
procedural model of the network, and the filtering rule above):

* `tb_three_cell_sorter`: corner values and random triples.
* `tb_snake_sorter`: the example above, all 512 binary windows and 4000
  random or impulse-heavy windows. It checks both network versions and the
  combinational variant, the 5-edge latency and the centre-pixel alignment.
* `tb_memory_array`: load, hold and clear, and load winning over clear.
* `tb_decision_unit`: the three worked examples, exact threshold edges and
  random triples.
* `tb_fsmd_scheduler`: 3000 windows. It checks outputs, UTMED, output kinds,
  latency per path, the 3-cycle hold in OUTPUT_FINAL and that every state is
  reached.
* `tb_utmf_top`: end to end at default settings, 4000 windows offered back to
  back. It checks the published example outputs (155, 155, 119, and 12, 83, 13
  from the authors' simulation), latency, the window period and that every
  output kind occurs.
* `tb_utmf_images`: filters a generated 32x32 test image under the noise types
  of the evaluation and compares every pixel with the model.

One run of `tb_utmf_images` gave, as PSNR of the image interior:

| noise | noisy | filtered |
|---|---|---|
| salt-and-pepper 20% | 12.2 dB | 26.6 dB |
| salt-and-pepper 50% | 8.3 dB | 20.9 dB |
| salt-and-pepper 70% | 7.1 dB | 18.8 dB |
| salt-and-pepper 90% | 5.9 dB | 14.5 dB |
| random-valued 10% | 19.7 dB | 24.5 dB |
| random-valued 30% | 14.2 dB | 20.5 dB |
| Gaussian, variance 0.005 | 22.9 dB | 23.6 dB |
| 30% salt-and-pepper + Gaussian 0.001 | 10.0 dB | 22.8 dB |

These numbers come from a synthetic image, not the standard test photographs,
and cannot be compared directly with published tables. They show the same
trend: strong removal of salt-and-pepper noise, useful removal of
low-density random-valued noise, and little effect on Gaussian noise.

## Departures and open points

* **Middle-row sort added** to the sorting network (see above).
  `FINAL_ROW_SORT=0` removes it.
* **Pipeline registers** in the sorter, and a **valid/ready handshake** with
  one window in flight. Neither is given in the publication, whose simulation
  shows reset pulses between windows.
* **Counter L** counts 255s upward from 0, as in the hardware description.
  The algorithm description instead starts it at 9 and counts down.
* **Even/odd branching.** The publication's DECISION text swaps "odd" and
  "even". The RTL follows the arithmetic: an even number of clean pixels is
  averaged in OUT_EVEN.
* **Table entry for a single 0** among eight 255s: 226, by the same
  sum-divided-by-9 rule as the published entries (198 ... 28 for 2 ... 8
  zeros).
* **Fixed thresholds.** The publication also mentions a threshold "updated
  based on the number of corrupted pixels", without a rule. That is not built.
* **Output transient.** The published waveform shows an intermediate output
  value (41) before one result settles. Here `op_o` changes once per window.

## Simulating and changing it

Any testbench runs with plain Verilator 5, from the folder that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/utmf_pkg.sv tb/utmf_ref_pkg.sv tb/tb_utmf_top.sv \
    --top-module tb_utmf_top
./obj_dir/Vtb_utmf_top
```

Replace `tb_utmf_top` with any other `tb_*` module. Each testbench ends with
`TB_RESULT checks=N failures=M`.

Files, one module or package each:

* `rtl/utmf_pkg.sv`: types, state and output-kind enums, default thresholds,
  the 0/255 mean table;
* `rtl/three_cell_sorter.sv`, `rtl/snake_sorter.sv`, `rtl/memory_array.sv`,
  `rtl/fsmd_scheduler.sv`, `rtl/decision_unit.sv`, `rtl/utmf_top.sv`.

Things to change:

* Thresholds: the `T`/`T1` parameters of `fsmd_scheduler` and
  `decision_unit`, defaulting to `T_DEFAULT`/`T1_DEFAULT` in the package.
* Pixel width: `PIX_W` in the package. The table in `mix_mean` and the
  impulse values `PIX_MIN`/`PIX_MAX` assume 8 bits.
