# Rule-90 cellular-automaton reservoir classifier

This is a small digital image classifier. Its feature extractor is not trained at all. The
features come from letting a grid of one-dimensional cellular automata run freely on the
image. Only a linear read-out layer is trained, offline. This is *reservoir computing*: a
fixed, rich dynamical system (the reservoir) spreads the input into many nonlinear
features, and a cheap linear model classifies them.

The automaton used is elementary rule 90. Under rule 90 each cell's next value is the XOR of
its two neighbours, so one automaton step costs one XOR gate per cell. The default
configuration classifies 28 x 28 8-bit grayscale images (MNIST digits) into 10 classes. It
uses 16 automaton iterations and 8-bit weights, and takes 834 clock cycles per image. That is
16.7 µs at 50 MHz.

The RTL implements a published FPGA design, *Reservoir Computing Hardware with Cellular
Automata* (Morán, Frasser and Rosselló). The section "Departures and own choices" lists what
was added to make it a complete circuit and where it differs.

## The algorithm in one page

Let `u` be an H x W image of B-bit pixels (28 x 28 x 8 by default).

1. **Bit planes.** Cut `u` into B binary images `u^(l)`, where plane `l` holds bit `l` of
   every pixel. The planes never exchange information.
2. **Rows and columns, separately.** Each row of each plane is a 1-D automaton of W cells.
   Each column of each plane is a 1-D automaton of H cells. Rows and columns both start
   from the image and are iterated independently. After `k` steps this gives two binary
   tensors, `x_r(k)` (iterated along rows) and `x_c(k)` (iterated along columns).
3. **Rule 90 with fixed ends.** In one step, inner cell `i` becomes `cell[i-1] XOR cell[i+1]`.
   The first and the last cell of every automaton keep their value.
4. **Combine.** The reservoir state of pixel `(r, c)` in plane `l` is
   `x_r(k)[l][r][c] XOR x_c(k)[l][r][c]`. The B planes of a pixel are read together as an
   unsigned number, `x_rc = sum_l 2^l * bit_l`. Slice 0 is the image itself.
5. **Pool.** Each slice `k = 0 .. M` goes through 2 x 2 max pooling with stride 2. This gives
   a 14 x 14 = 196-value "reduced state vector" per slice.
6. **Read out.** Class `q` gets the logit `y_q = sum_k sum_p pooled_k[p] * w[k][p][q]`. The
   predicted class is the largest logit. No softmax is needed, because softmax does not
   change which logit is largest.

With M = 16 there are 17 slices. That is 17 x 196 x 10 = 33,320 weights of 8 bits each,
trained offline with softmax (multinomial logistic) regression.

A note on slice 0: at `k = 0` the row and column automata both hold the image, so their XOR
would be all zeros. The design therefore reads slice 0 straight from the row automata, which
then hold the image. The read-out sees the original image plus 16 evolved versions of it.

## Hardware structure

```
             image (6272 bits, parallel)
                  |
   +--------------v---------------+      reca_ctrl: load / step / first /
   | ca_reservoir                 |<---- clear / acc_en / slice / group
   |  8 x 28 row R90PUs           |
   |  8 x 28 column R90PUs        |
   |  6272 XOR (row ^ column)     |
   +--------------+---------------+
                  | 28 x 28 pixels of 8 bits
          +-------v-------+
          |   max_pool    |  196 comparator trees
          +-------+-------+
                  | 196 pooled pixels
   +--------------v---------------+    +---------------------------+
   | logit_unit                   |<---| weight_memory             |
   |  group g: pooled[4g .. 4g+3] |    |  833 words x 320 bits,    |
   |  10 classes x 4 multipliers  |    |  word = slice*49 + group  |
   |  10 x 32-bit accumulators    |    +---------------------------+
   +--------------+---------------+
                  | logits[10]
             argmax_unit -> class_idx
```

| Module          | What it holds                                                             |
|-----------------|---------------------------------------------------------------------------|
| `reca_pkg`      | Default sizes, the weight and pixel types, the controller state enum     |
| `r90pu`         | One rule-90 automaton: R-bit register, neighbour XORs, load mux          |
| `ca_reservoir`  | 2·B·28 R90PUs (448 by default), 6272 row/column XORs, slice-0 select      |
| `max_pool`      | 2 x 2 / stride-2 max pooling into a row-major 196-value vector            |
| `weight_memory` | Register file of all weights, with a write port and a read by (slice, group) |
| `logit_unit`    | 40 multipliers (4 per class) and the 10 logit accumulators               |
| `argmax_unit`   | Index of the largest logit (lowest index wins a tie)                     |
| `reca_ctrl`     | Three-state sequencer: IDLE → RUN → DONE                                  |
| `reca_top`      | Wires it all together                                                     |

### The rule-90 processing unit

`r90pu` is the basic cell of the reservoir. Its register bit `i` (cell `i+1`) loads one of
two values:

- the external `init_state[i]` when `load` is high;
- the rule-90 next state when `step` is high: `state[i-1] ^ state[i+1]` for inner cells,
  and `state[i]` itself for cells 0 and R-1.

Otherwise the register holds. Updating all 448 units together advances the whole
reservoir by one step in one clock.

### Schedule of one classification

The multipliers cannot cover a whole slice at once: 196 pooled pixels × 10 classes would
need 1960 of them. So each class has 4 multipliers, and a slice is read out in 49 cycles of
4 pooled pixels each. The automata hold still during those 49 cycles. They step on the
clock edge that ends the slice's last group, so the next cycle already reads the next
slice.

| Cycle (start = 0)       | Controller | What happens                                                  |
|-------------------------|------------|---------------------------------------------------------------|
| 0                       | IDLE       | `start`: the image is loaded into all R90PUs and the logits are cleared |
| 1 .. 49                 | RUN        | slice 0 (the image), groups 0..48 accumulated                 |
| 49 (last group)         | RUN        | the automata also step: slice 1 is ready at cycle 50          |
| 50 .. 833               | RUN        | slices 1..16, 49 cycles each; a step ends each slice but the last |
| 834                     | DONE       | `done` = 1; `logits` and `class_idx` final                    |

In general the latency is `1 + (M+1) * ceil(H*W/4 / DSP)` cycles. The published FPGA
implementation reports 0.020 ms at 50 MHz (1000 cycles) for the same configuration.

### Weight memory layout

Weights are addressed by slice `k`, group `g`, multiplier `d` and class `q`. Pooled pixel
`p = g*DSP + d` is pixel `(p / 14, p % 14)` of the 14 x 14 pooled image. Word
`k*49 + g` holds `wdata[q][d] = w[k][g*4+d][q]` for all 10 classes and 4 multipliers. A word
is packed as `[Q-1:0][DSP-1:0][7:0]`, so class 0 / multiplier 0 is bits 7:0. Weights are
signed two's complement. The trained floating-point weights therefore have to be scaled to
8-bit integers in this order before they are written. A logit equals the integer dot
product, and the overall scale does not affect the argmax.

## Interface of `reca_top`

| Port        | Dir | Width            | Meaning                                               |
|-------------|-----|------------------|-------------------------------------------------------|
| `clk`       | in  | 1                | clock (the published design runs at 50 MHz)           |
| `rst_n`     | in  | 1                | synchronous, active low                               |
| `w_we`      | in  | 1                | write one weight word                                 |
| `w_addr`    | in  | 10               | word address `slice*49 + group`                       |
| `w_data`    | in  | 10 x 4 x 8       | the word, `[class][multiplier][bit]`                  |
| `start`     | in  | 1                | classify `image`; ignored while `busy`                |
| `image`     | in  | `[28][28]` x 8   | `image[row][col]`, sampled on the `start` edge only   |
| `busy`      | out | 1                | a classification is in progress                       |
| `done`      | out | 1                | one-cycle pulse: results valid                        |
| `logits`    | out | 10 x 32 signed   | held until the next `start`                           |
| `class_idx` | out | 4                | predicted class                                       |

Write all 833 words first, then pulse `start`. The weights stay in place for any number of
images.

## Size

Default configuration:

- **Reservoir state:** 448 × 28 = 12,544 flip-flops.
- **Reservoir logic:** 448 × 26 neighbour XORs, plus 6272 combining XORs.
- **Pooling:** 196 four-input max units.
- **Read-out:** 40 signed 9 x 8-bit multipliers and 10 32-bit accumulators.
- **Weights:** 266,560 weight bits. They are written as a register array, so a synthesis
  tool can map them to block RAM (asynchronous read) or to flip-flops.

The published FPGA build used 22.6K ALMs and 40 DSP blocks on a Cyclone V.

## Departures and own choices

The structure follows the published design: bit planes, one rule-90 unit per row and per
column, the row/column XOR, 2 x 2 pooling, per-iteration weight registers chosen by the
iteration number, 4 multipliers per class, and accumulation into 10 logit registers. These
points are this RTL's own:

- **Fixed boundary.** The end cells keep their value, as the published R90PU schematic
  wires them. Another reading of "fixed boundary" is constant-zero neighbours outside the
  automaton; that would give `next[0] = state[1]` instead.
- **No feedback of the combined tensor.** The row and column automata evolve
  independently from the image, and their XOR is only read out, never written back. This
  follows the published equations and the R90PU schematic, whose register loops through
  its own neighbour XORs. One sentence of the published figure caption could also be read
  as feeding the combined tensor back into the automata.
- **17 weight sets, not 16.** The text counts M·w·h/4 weights. Its figures and the
  reservoir-vector definition run from iteration 0 to iteration M. This RTL reads out 17
  slices, k = 0..16.
- **Slice 0 = the image.** This is done with a multiplexer, as explained above.
- **Control and interfaces are invented here:**
  - the controller and its schedule;
  - the clock enable on the automata;
  - the start/busy/done handshake;
  - the weight write port and word layout;
  - the parallel image input;
  - resets;
  - the 32-bit logit width;
  - the hardware argmax.

  The published description gives only the datapath.
- **Weight format.** Weights are taken as signed two's complement. Pixels are unsigned.
- **Not included.** Training (done offline) and the FPGA test harness around the
  classifier. The multipliers are plain `*`, for a tool to map onto DSP blocks.

## Simulation

Every module has a self-checking testbench in `tb/`, named `tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M`. Every testbench compares the RTL against its own
reference. The references are written from the definitions above, not from the RTL.

- `tb_r90pu`: the rule, holds, load priority, and the fixed end cells.
- `tb_ca_reservoir`: 16 steps of 28 x 28 x 8 images against a per-plane model.
- `tb_max_pool`: random windows and a planted maximum.
- `tb_weight_memory`: write and read back every word.
- `tb_logit_unit`: full slices against 64-bit sums, plus extreme values.
- `tb_argmax_unit`: random logits, ties, and a planted maximum.
- `tb_reca_ctrl`: the schedule, cycle by cycle.
- `tb_reca_top`: the whole classifier at its default size against a complete software
  model of the algorithm. It checks the 834-cycle latency and counts every mechanism (load,
  step, slice-0 pass-through, weight-set switch, clear, start ignored while busy, done).

Run one with Verilator 5:

```
verilator --binary --timing --assert -j 4 --top-module tb_reca_top \
    -y rtl -y tb +libext+.sv rtl/reca_pkg.sv tb/tb_reca_top.sv
./obj_dir/Vtb_reca_top
```

`tb_reca_top` takes about two minutes to build, and well under a second to run four images.

## Changing the design

`reca_top` takes the image size (`W`, `H`), depth (`B`), iterations (`M`), classes (`Q`),
multipliers per class (`DSP`), weight width (`WBITS`) and logit width (`LOGIT_W`) as
parameters. The defaults are in `reca_pkg`.

- `W` and `H` must be even.
- More multipliers per class shorten the schedule proportionally: with `DSP = 14`, a slice
  takes 14 cycles.
- The weight address width follows `(M+1) * ceil(H*W/4/DSP)`.
- For a different automaton rule, only the next-state expression in `r90pu` changes.
