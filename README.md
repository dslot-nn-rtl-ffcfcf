# DSLOT-NN: a digit-serial, most-significant-digit-first convolution layer with early ReLU termination

A convolution followed by ReLU throws away every negative result. A conventional
multiply-accumulate unit only learns the sign of a sum at the very end, after all
carries have propagated, so it pays for the whole computation of a result that is
then zeroed. This design computes each convolution output *most significant digit
first* with online (left-to-right) arithmetic: multipliers and adders that take
and produce one signed digit per cycle, starting from the top digit. The sign of
the result is therefore known as soon as the first non-zero digit comes out, and
the hardware computing a negative output can be stopped at that point.

The RTL implements the first three layers of a small MNIST network — a 5 x 5
convolution, ReLU, and 2 x 2 max pooling of a 28 x 28 image, for five filters —
with four processing blocks working on the four pixels of one pooling window at
a time. Everything is parameterised (image size, kernel size, number of filters,
number of input feature maps).

## 1. Number representation

All operands are fractions. A stream carries radix-2 *signed digits*
d in {-1, 0, +1}, each as two wires `(p, n)` with d = p - n (type `sd_t` in
`dslot_pkg`); `(1,1)` is a second code for 0. The first digit of a stream has
weight 2^-1, the next 2^-2, and so on.

* **Pixels** are 8-bit two's complement codes `c`. They enter the datapath as
  the digit stream `-c[7], c[6], c[5], ..., c[0], 0, 0, ...`, whose value is
  c / 256. (Non-negative image data, e.g. MNIST intensities, must be scaled to
  0..127 by the host.)
* **Weights** are 8-bit two's complement codes `w` read as -w[7] + sum w[7-i] 2^-i,
  i.e. value w / 128. They are applied in parallel.
* A product therefore has 15 fraction bits; the multiplier emits 16 digits,
  which represent it exactly.
* Each online adder emits one digit more than its operands, because the sum of
  two fractions needs an integer digit. The adder's output stream is read as the
  fraction (x + y) / 2. A tree of L adder levels thus produces sum / 2^L.
* A 5 x 5 window (25 products, 5 adder levels) gives **P = 16 + 5 = 21** result
  digits worth SOP / 32. The pooled value leaves the chip as a 22-bit two's
  complement number with 21 fraction bits; as an integer it equals
  `2 * sum(pixel_code * weight_code)`, clipped at 0.

With N_IN input feature maps one more adder tree of ceil(log2 N_IN) levels sums
the maps; P grows by that many digits.

## 2. Online delay and why a window takes 33 cycles

An online operator with *online delay* δ presents output digit j in the same
cycle in which input digit j+δ is presented. Both operators here have δ = 2, so
a chain of them is pipelined at the digit level: a stage starts as soon as the
stage before it has produced two digits. The number of cycles from the first
pixel digit to the last result digit is

    Num_Cycles = δ_mul + δ_add * (ceil(log2(K*K)) + ceil(log2(N_IN))) + P
               = 2 + 2 * 5 + 21 = 33        (K = 5, N_IN = 1)

The RTL matches this exactly: result digit i is on the ReLU unit's input in
cycle 12 + i of a window, and the last one (i = 21) in cycle 33. The input digits
run out after cycle 8; zeros are fed afterwards while the pipeline drains.

## 3. The online multiplier (`online_multiplier.sv`)

A serial-parallel multiplier: the weight Y is parallel, the pixel x arrives one
digit per cycle. It keeps a residual W in carry-save form (two registers, WS
and WC, of 11 bits: 2 integer and 9 fraction bits) and each cycle computes

    V      = 2W + x_{j+2} * Y / 4        -- Y, NOT Y or 0 selected by the digit, shifted
                                            right by two, added by one row of 3:2 adders;
                                            for x = -1 the +1 of the negation enters the
                                            free carry LSB
    z_{j+1} = SELM(V^)                   -- V^ = top 4 bits of WS + top 4 bits of WC
    W      = V - z_{j+1}                 -- subtract the digit from the integer bits

The selection uses the truncated estimate V^ (multiples of 1/4): **+1 if
V^ >= 1/4, -1 if V^ <= -3/4, else 0**. Truncation only lowers the estimate
(V^ <= V < V^ + 1/2), which is why the thresholds are asymmetric. With them
the residual stays within |W| <= 3/4 for any 8-bit weight including -1, and V
stays within (-2, 2), so 2 integer bits suffice and the 4-bit estimate cannot
wrap. Because the 16 emitted digits and the exact product are both multiples of
2^-16, and their difference is 2^-16 * W with |W| < 1, the product is exact.

The first two cycles after `clr` only load the residual (the δ = 2 start-up) and
emit 0. The digit output is taken straight from SELM, not registered: the
register that holds it is the operand stage of the first online adder. This
keeps δ_mul = 2.

## 4. The online adder (`online_adder.sv`) and the reduction tree

The adder is two rows of one full adder each, with the input and output
inversions that make the signed-digit algebra work:

    FA1:  x+ + NOT x- + y+          = 2h + NOT g     (h moves one position up)
    hold g and y- for one cycle
    FA2:  h + NOT g + NOT y-        = 2 NOT t + w
    hold w for one cycle; the digit of a position is (w, t)
    register the digit on the output

Adders whose inputs are both zero start from an all-zero state, which encodes
the value 0. `reduction_tree.sv` arranges its LEAVES input streams as the leaves of a
binary heap (node 1 is the root, node i has children 2i and 2i+1). The leaf
count is padded to a power of two with zero streams, so every level costs the
same delay and digit growth. Adders with two constant-zero inputs fold away
in synthesis. With 25 leaves, 27 of the 31 adders remain: an adder with one
zero operand still supplies the delay and halving that align a leftover stream.

## 5. ReLU and early termination (`relu_unit.sv`)

The ReLU unit shifts each incoming digit's `p` bit into a register zp and its `n`
bit into zn. After j digits, zp - zn is the value of the prefix, in units of
the last digit. The digits that follow can change the value by less than one
such unit. So the result is negative once **zp < zn** (as unsigned numbers), and
it is known to be negative at the latest at its first non-zero digit. The unit
raises `neg` combinationally in the cycle of that digit and keeps it high.

The control unit then drops the block's enable from the next cycle on. That
freezes every multiplier and adder register of the block; in an ASIC or FPGA
this is where the dynamic power is saved. The unit's `value` output is 0 for a
negative result. Otherwise it is zp - zn, computed once at the end; eq. (2)
of the original work names this subtraction `SUB(x+, x-)`.

A negative result has a leading zero digit for each leading binary zero of its
magnitude, so small negative results are detected later than large ones. On the
synthetic test image of the layer testbench, about 37% of the convolutions are
negative. They are stopped after 17.8 of the 33 digit cycles on average, which
saves 46% of their cycles. Over all convolutions, 17% of block-cycles are saved.
A pooling window still ends only when its slowest block is done.

## 6. Run-time precision

`prec` (sampled at `start`) sets how many result digits are collected, 1..21.
The window then lasts 12 + prec cycles instead of 33. Because digits arrive most
significant first, stopping early gives the best prec-digit approximation
available at that point. The error is below 2^(21-prec) in units of the output
LSB. The ReLU unit left-aligns a shortened result, so the output format does
not change.

## 7. Data movement and control

```
 host writes ──> input_filter_buffers ──row (28 px)──> fmap_interconnect ──digits──┐
                    │ weights (parallel, selected filter)                         │
                    v                                                             v
            ┌─────────────── processing_block x 4 (one per pixel of the 2x2 window) ─────────┐
            │  processing_engine x N_IN  ->  online adder tree over maps  ->  relu_unit    │
            │  (25 online multipliers + online reduction tree per engine)                  │
            └─────────────────── neg (to control) / value ────────────────────────────────-┘
                                      │
 control_unit (FETCH / RUN / POOL / NEXT, enables, termination) ──> maxpool ──> pooled output
```

* `input_filter_buffers`: one word per image row (28 pixels), synchronous read,
  one pixel written per host cycle. The NF filters are held in registers and the
  selected filter is presented as 25 parallel weights per input map.
* `fmap_interconnect`: the four 5 x 5 windows of a 2 x 2 pooling window overlap
  in a 6 x 6 patch. The patch is loaded row by row into 36 shift registers; each
  shift register converts its pixel to digits, and block p = 2·dy + dx reads the
  window at patch offset (dy, dx). Each pixel is thus converted once and shared.
* `control_unit`: for each filter (outer loop) and each pooled output
  (row-major), it spends 7 cycles in FETCH (6 row reads plus one for read latency;
  the blocks are cleared in the last one). RUN takes 12 + prec cycles, ending early
  once all four blocks have reported a negative result. POOL then strobes the
  max-pooling unit, and NEXT holds the coordinates while the result is on the
  output. A full window takes 42 cycles, so a whole 5-filter layer takes at most
  30,240. Two 32-bit counters report the number of terminated convolutions and
  the block-cycles actually spent.
* `maxpool`: a signed comparator tree with a registered output.
* `dslot_nn` (top): wires the above together and exposes the host write ports,
  `start`/`prec`/`busy`/`done`, the pooled output stream
  (`pool_valid`, `pool_out`, filter/row/column) and the counters.

Top-level use: write pixels (`px_we`, `px_ch`, `px_row`, `px_col`, `px_data`)
and weights (`wt_we`, `wt_f`, `wt_ch`, `wt_idx` = 5·row + column, `wt_data`)
while idle, pulse `start`, and collect NF × 12 × 12 outputs until `done`.

## 8. Parameters

| parameter | default | meaning |
|---|---|---|
| `H` | 28 | input map height and width |
| `K` | 5 | kernel size; 25 multipliers per engine |
| `NF` | 5 | filters held and processed per layer run |
| `N_IN` | 1 | input feature maps = engines per processing block |
| `WB` | 8 | pixel and weight bits (`dslot_pkg::OPERAND_BITS`) |

All defaults are the sizes of the evaluated network; nothing is scaled down.
`dslot_pkg::p_out()` and `num_cycles()` give P and Num_Cycles for other sizes.
Only the four-block, 2 x 2 pooling arrangement is fixed.

## 9. Where this RTL departs from, or adds to, the original description

* **Multiplier selection constants and residual width** are derived here (Section 3).
  The original description defers them to an earlier publication.
* **No output register after SELM.** The multiplier diagram shows an output
  register (`Z_out`). Registering there would make the multiplier's delay 3 and
  a window 34 cycles. The stated δ = 2 and 33 cycles were kept instead.
* **Adder stages are registered.** The online adder keeps its output registers, as
  drawn. So the critical path is one multiplier plus one adder. The original text
  instead adds five adder delays to the multiplier's critical path.
* **Zero-padded adder tree** (Section 4); the original only draws a pairwise tree.
* **Buffers, interconnect, control FSM, host interface, output stream and
  counters** are only named as boxes in the original; their organisation here is
  this design's own.
* **Pixel digit conversion** (sign bit -> digit -1) is this design's choice.
  The original states only that 8-bit fixed point is converted to redundant form.
* **Run-time precision** is implemented as the number of result digits collected.
  The original claims run-time precision tuning without saying how.
* **One group of four processing blocks.** The original notes that the group can
  be replicated to compute several output maps at once. This design has one
  group and computes the filters one after another.
* **The fully connected and softmax layers** of the network are outside the
  accelerator, as in the original.
* **FPGA resource, power and timing figures** of the original (LUTs, mW, ns,
  GOPS/W) are not reproduced and cannot be checked with this RTL alone.

## 10. Verification

Every module in `rtl/` has a self-checking testbench in `tb/` named `tb_<module>`.
Each compares against values computed independently in the testbench and ends
with a `TB_RESULT checks=… failures=…` line. Concurrent assertions in the RTL
guard the invariants the arithmetic relies on: the multiplier residual stays
within ±3/4, a negative decision is sticky, and a stopped block is not re-enabled
within a window.

* `tb_online_multiplier`, `tb_online_adder`, `tb_reduction_tree`: thousands of
  random operands, including extreme weights. The full digit stream is rebuilt
  and compared exactly with the product or sum. Digit timing (δ = 2, 5 levels
  = 10 cycles) is checked, and random stall cycles (enable low) are inserted.
* `tb_processing_engine`: random 5 x 5 windows. The result must arrive on cycles
  13..33 and equal 2·Σ pixel·weight.
* `tb_relu_unit`: `neg` must rise exactly at the first digit whose prefix is
  negative. It also checks ReLU values for full and shortened streams.
* `tb_processing_block`: two input maps (N_IN = 2, 22 digits, first digit at
  cycle 15), with the enable dropped after `neg` as the control unit does.
* `tb_fmap_interconnect`, `tb_input_filter_buffers`, `tb_maxpool`,
  `tb_control_unit`. The last one checks window order, the 33-cycle run length,
  the early end of all-negative windows, the enable/dv timing and the counters.
* `tb_dslot_nn`: the whole layer at default size. It runs a synthetic 28 x 28
  "digit" image with five random filters and checks all 720 pooled outputs
  exactly. It checks that windows without negatives take 33 digit cycles and
  all-negative windows end early. It checks that the termination count equals the
  number of negative convolutions. It then reruns the layer with prec = 10 and
  checks the error bound.

* `tb_dslot_nn_multi`: the general configuration with two input maps per
  processing block (N_IN = 2), a 12 x 12 input and three filters. It checks
  every pooled output exactly and the 36-cycle window length
  (2 + 2·(5+1) + 22), and it exercises early termination and early-ended windows.
* `tb_dslot_nn_batch`: a batch of 200 images (20 per digit class) at default
  size. The filters are loaded once and the pixel store is rewritten before
  each image. Each image draws the seven-segment shape of its class with
  3-pixel strokes on a black background, shifted by up to two pixels. All
  144,000 pooled outputs are checked exactly. For each image the termination
  count must equal the number of negative convolutions. Per class it prints the
  share of negative convolutions and of block-cycles saved. With random
  filters and no bias, about 23% of convolutions are negative and about 10% of
  block-cycles are saved. These numbers depend on the synthetic images and
  filters and are not a reproduction of a trained network.

To run one with Verilator (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Irtl rtl/dslot_pkg.sv rtl/*.sv tb/tb_dslot_nn.sv \
          --top-module tb_dslot_nn -o sim && ./obj_dir/sim
```

Every file passes `verilator --lint-only -Wall` with warnings only. The only
warnings are unused clock/reset/enable inputs of a one-leaf reduction tree and
an unused package constant. The files also pass the slang front end of Yosys.
At default parameters the top synthesises to about 8,000 word-level cells,
3,100 flip-flops and 7.6 kbit of memory.
