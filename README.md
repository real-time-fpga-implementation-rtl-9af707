# Semi-Global Matching for a 4K stereo stream, four pixels per clock

This is synthesizable SystemVerilog for a streaming stereo-disparity engine. It takes a rectified
stereo pair as two 3840x2160 video streams. It returns one disparity (0..63) per pixel. The
algorithm is Semi-Global Matching (SGM) with a 5x5 census transform as matching cost and four
aggregation paths.

A 4K frame at 30 frames/s is about 250 Mpixel/s, or close to 300 MHz with blanking. That is far
beyond what an SGM pipeline closes on a mid-range FPGA. So the stream carries four horizontally
adjacent pixels per clock word (the "4ppc" format), and the pipeline runs at roughly 75 MHz.
Everything in the design is replicated four times, once per pixel of a word. The one part where
that is not enough is the horizontal aggregation path: there each pixel depends on the pixel just
before it. How the design breaks that dependency is the core idea, described in
[The horizontal path and the 4ppc estimate](#the-horizontal-path-and-the-4ppc-estimate).

## Pipeline

```
 in_base[4] ─┐   ┌──────────────────────┐  C[4][64]   ┌─────────────────────┐ L[4 paths][4][64] ┌─────┐ S[4][64] ┌────────┐
             ├──►│ sgm_matching_cost    │────────────►│ sgm_cost_aggregation│──────────────────►│ sum │─────────►│ argmin │──► out_disp[4]
 in_ref[4]  ─┘   │ context gen, census, │             │  0° (estimate)      │                   └─────┘          └────────┘
                 │ Hamming, 4 x 64/clk  │             │  45°, 90°, 135°     │
                 └──────────────────────┘             │  (line memories)    │
                    4 cycles                          └─────────────────────┘   1 cycle            1 cycle
                                                          2 cycles
```

| module | role |
|---|---|
| `sgm_top` | the whole pipeline; latency 8 cycles |
| `sgm_matching_cost` | two context generators, 8 census units, reference census history, 4x64 Hamming distances |
| `sgm_cntx_gen` | 5x5 windows for the 4 pixels of a word, from 4 line buffers |
| `sgm_census`, `sgm_hamming` | census transform of one window; popcount of XOR |
| `sgm_cost_aggregation` | the four path blocks side by side |
| `sgm_path_horiz` | 0° path: estimator + 4 aggregation units + feedback register |
| `sgm_path_line` | 45°/90°/135° path (`DIR` = -1/0/+1): line memory + 4 aggregation units |
| `sgm_agg_unit`, `sgm_agg_cell`, `sgm_min_tree` | one SGM step for all 64 disparities |
| `sgm_l_estimator` | previous-pixel cost estimate for pixels 2..4 of a word |
| `sgm_sum`, `sgm_disp_select` | S = sum of the four paths; argmin over d |
| `sgm_stream_pos` | word/line counters derived from `in_valid` and `in_sof` |
| `sgm_pkg` | widths, default sizes and types |

## Stream interface and image geometry

All blocks use the same bare stream. `in_valid` marks a cycle that carries a word: four pixels of
one line, columns 4k..4k+3, left to right. `in_sof` is high together with the first word of a
frame. Words arrive in raster order. `in_valid` may drop anywhere, for horizontal or vertical
blanking or mid-line. Nothing stalls: every block holds its state while `in_valid` is low and
passes the valid flag down a fixed-latency pipeline. The output is one word of four disparities
per input word, `LATENCY` = 8 cycles later, with `out_sof` on the first.

Line and frame positions come from counting valid words (`WIDTH/4` words per line, `HEIGHT` lines
per frame) from the last `in_sof`. A frame must therefore be exactly `WIDTH x HEIGHT` pixels.

The 5x5 windows are built only from pixels that have already arrived. The window of stream
position (x, y) covers lines y-4..y and columns x-4..x. So **the disparity at output position
(x, y) belongs to image pixel (x-2, y-2)**. The first two output lines and columns describe pixels
outside the image, and the last two lines and columns of the image get no output. This choice
needs no look-ahead and no flush lines. Window pixels above the first line or left of the first
column read as 0.

## Matching cost

Each pixel's 5x5 window is reduced to a 24-bit census vector. A bit is 1 when that neighbour is
*greater* than the centre; equal gives 0. The cost of base pixel x at disparity d is the Hamming
distance to the reference census at x-d, a value from 0 to 24 (5 bits).

Per clock this needs 4 base windows and 4 + 64 - 1 = 67 reference positions. The design builds
only 4 reference windows per clock. It keeps the census vectors of the last 67 reference pixels
in a shift register (`hist_q`) that moves by four entries per word. All 4 x 64 Hamming distances
are then taken in parallel.

The base image is the left camera and the reference is the right camera, so a match lies at x-d
in the reference. Some descriptions of the method write the reference pixel as x+d. With a
left-base convention that is the other camera's view. Here x-d is used, which also needs only
past pixels. Reference positions left of the line start are not masked. For x < d the cost
compares with the end of the previous line, or with zeros after reset. Those costs are
meaningless, like in any SGM without border handling.

## Path aggregation

For every path r the SGM recursion is

```
L_r(p,d) = C(p,d) + min( L_r(p-r,d), L_r(p-r,d-1)+P1, L_r(p-r,d+1)+P1, min_i L_r(p-r,i)+P2 )
                  - min_k L_r(p-r,k)
```

`sgm_agg_unit` computes it for all 64 disparities of one pixel in one combinational step. It has
one 64-input minimum tree for min_k L_r(p-r,k). That minimum is shared by 64 copies of a small
cell (`sgm_agg_cell`). The cell has two +P1 adders, a +P2 adder, a 4-input minimum, an add of C
and a subtract of the shared minimum. At d = 0 and d = 63 the missing neighbour is left out.

Path costs are 8 bits. Because the previous minimum is subtracted, L <= C + P2 <= 24 + P2. The
8-bit result therefore never saturates for P2 <= 231. P1 and P2 are run-time inputs of `sgm_top`;
the tests use P1 = 6, P2 = 30 and a few other settings. Aggregation runs on four paths. All four
enter a pixel from pixels that have already streamed past:

- **90°** from the pixel above;
- **45°** from the upper-left pixel;
- **135°** from the upper-right pixel;
- **0°** from the pixel to the left.

The remaining four directions would need a whole buffered frame and are not built.

### The line-buffered paths (45°, 90°, 135°)

These paths take their predecessor from the previous line, so there is no dependency inside a
line. Each `sgm_path_line` keeps the path costs of one full line in a memory. The memory has 960
words of 4 pixels x 64 disparities x 8 bits, which is 1.97 Mbit per path.

While word k of line y arrives, word k+1 of line y-1 is read. Two registers keep words k-1 and k,
so the upper-left, upper and upper-right neighbours of all four pixels are at hand. The new
costs are written back to address k. At the last word of a line the read wraps to address 0.
By then address 0 already holds the current line's first word, which is what the next line
starts with.

In the first line, and where the predecessor would lie outside the image, the predecessor is
taken as all zeros. That makes L = C, the usual start of an SGM path.

### The horizontal path and the 4ppc estimate

For the 0° path the predecessor of pixel 2, 3 and 4 of a word lies in the same word. The exact
recursion would chain four aggregation units in one clock. That is four 64-input minima, four
4-input minima and a dozen adders in series, too slow at 75 MHz.

`sgm_path_horiz` instead feeds back only L(p_last,d). That is the exact path cost of the last
pixel of the previous word, held in the output register. From it, `sgm_l_estimator` estimates
the missing predecessors using the matching costs C1..C3 of the earlier pixels of the current
word:

```
L'(p1 - r) = L                                   (exact)
L'(p2 - r) = L + (C1 - L) / λ
L'(p3 - r) = L + ((C1 + C2)/2 - L) / λ
L'(p4 - r) = L + ((C1 + C2)/4 + (C3/2 - L)) / λ
```

with λ a power of two. Each estimate moves the last exact path cost toward the average matching
cost of the pixels in between, by a fraction 1/λ. All divisions are shifts. /2 and /4 truncate,
and /λ of the signed difference is an arithmetic shift (floor). The last line is grouped so that
its longest path is three adders. Four aggregation units then run in parallel on
L'(p1..p4 - r), and unit 4's result becomes the next word's L(p_last).

The estimate always lies between L and the averaged cost, so it fits 8 bits. λ is the parameter
`LAMBDA_LOG2`, default 2 (λ = 4). No particular value is prescribed: the scheme allows any power
of two. At the first word of a line the fed-back cost is zeroed, so the path restarts with
L = C at the line start.

The price is accuracy. For pixels 2..4 of every word the 0° path uses an estimate instead of the
true predecessor. The method this follows reports an average error rate within about 0.4
percentage points of exact 4-path SGM on the Middlebury 2014 set (36.64 % vs 36.27 % of all
pixels wrong, without post-processing). This implementation has not been evaluated on that data.

## Sum and disparity selection

S(p,d) is the sum of the four path costs (10 bits). The output disparity is argmin_d S(p,d), found
by a balanced compare-and-select tree per pixel; on equal costs the smaller disparity wins. There is
no sub-pixel interpolation, median filter or left-right check.

## Sizes

| parameter | default | meaning |
|---|---|---|
| `WIDTH` | 3840 | pixels per line, multiple of 4, at least 12 |
| `HEIGHT` | 2160 | lines per frame |
| `DISP` | 64 | disparity range, output is `$clog2(DISP)` bits |
| `LAMBDA_LOG2` | 2 | estimate weight λ = 2^LAMBDA_LOG2 (0° path) |
| `PPC`, `WIN`, `PW`, `LW` | 4, 5, 8, 8 | in `sgm_pkg`: pixels per clock, window, pixel and path-cost widths |

`PPC` is fixed at 4: the estimator's equations are written for four pixels.

At the defaults, coarse synthesis gives about 22k flip-flop bits and 6.1 Mbit of memory:

- 3 x 1.97 Mbit of path-cost line memories;
- 2 x 0.12 Mbit of pixel line buffers.

On a Virtex-7 that is in the range of 170-200 36-kbit block RAMs. The word-level netlist is
dominated by 16 aggregation units of 64 cells each, plus 256 Hamming distances.

Throughput is one word per clock with no stall. A 3840x2160, 30 frame/s stream needs 62.2 M
words/s, or 74.25 MHz with standard 4K blanking. Whether a given device closes timing at that
clock is a synthesis result. The longest combinational path runs through the 0° feedback loop:
estimator, 64-input minimum, cell, and back to the register.

## Where this design makes its own choices

The overall architecture is a known SGM-4ppc scheme. These points are this implementation's own:

- the stream interface (`in_valid`/`in_sof`) and the output offset of (2, 2) pixels;
- the internal organisation of the context generator;
- the reference census history used in place of 67 reference windows;
- the read-ahead addressing of the line memories;
- border handling: zero pixels outside the frame, and paths restarting with L = C;
- bit widths (8-bit pixels, 8-bit path costs);
- census bit order;
- tie-breaking in the argmin;
- x-d for the reference pixel;
- λ = 4;
- pipeline registers and latencies.

Each module's header comment says which of its parts follow the scheme and which are chosen.

Not included: the HDMI receivers and video I/O of a board system, rectification, and the four
aggregation directions that would need a buffered frame.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=N failures=M`. The expected values come from `tb_sgm_model_pkg`, a behavioural
model written directly from the equations, not from the hardware structure:

- windows are read from stored images;
- the reference census history is a flat list over the whole stream;
- the paths are plain recursions over rows.

| testbench | what it shows |
|---|---|
| `tb_sgm_census`, `tb_sgm_hamming` | a worked 3x3 census example (centre 4 → `11101000`, centre 3 → `11110100`, distance 3), random windows |
| `tb_sgm_agg_unit` | 64-disparity SGM step; random, sharp-minimum (P1/P2 transitions) and path-start inputs |
| `tb_sgm_l_estimator` | the estimate for λ = 1, 4, 16, a hand-worked case with negative differences |
| `tb_sgm_cntx_gen`, `tb_sgm_matching_cost` | every window and every cost over two frames with random gaps; latency 2 and 4 |
| `tb_sgm_path_horiz`, `tb_sgm_path_line`, `tb_sgm_cost_aggregation` | every path cost over two frames, including the minimum 3-word line; latency 2 |
| `tb_sgm_sum`, `tb_sgm_disp_select` | sums at full scale; argmin with ties |
| `tb_sgm_top` | 32x10, 16 disparities, two frames with gaps. Every disparity is checked against the model. A planted shift must be recovered at over 80 % of interior pixels (it is at all of them). The test counts gaps, frame restarts, P1/P2 transitions and non-trivial estimates, and fails if any never happened |
| `tb_sgm_top_full` | one full 3840x2160 frame at default parameters, one word per clock with short line blanking. The first 12 lines are checked bit-exact against the model. Every word must come out once, 8 cycles after entry, which also shows the one-word-per-clock rate. A planted shift of 23 (upper half) and 41 (lower half) must be found at over 95 % of interior pixels (found at 99.99 %). Runs in about 2 minutes |

To run one with plain Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sgm_pkg.sv tb/tb_sgm_model_pkg.sv \
          tb/tb_sgm_top.sv --top-module tb_sgm_top -Mdir obj_top
obj_top/Vtb_sgm_top
```

Replace `tb_sgm_top` with any other testbench name. Modules are found through `-Irtl` by file
name.

The full-size build takes about 20 s and the run about 1.5 minutes. The reduced end-to-end test
is the place to start when changing the arithmetic: the model and the RTL must agree bit for bit.
To change the estimate, edit `sgm_l_estimator` and the `est` function of the model together.

Not verified: timing closure and resource use on an actual FPGA, behaviour on real camera data,
and the Middlebury error rates.
