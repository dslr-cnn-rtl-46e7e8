# DSLR-CNN: a convolution accelerator built on left-to-right digit-serial arithmetic

Bit-serial CNN accelerators save wires and area because they move one bit per
cycle instead of a whole word. When the arithmetic is the usual
least-significant-bit-first kind, though, each operator must wait for its
predecessor to finish the whole word: a multiplier followed by a tree of eight
adders costs about nine word-times. This design uses *online* (left-to-right,
most-significant-digit-first) arithmetic instead. Operands and results flow as
radix-2 signed digits, most significant first. Each operator emits its first
result digit a fixed two cycles (its *online delay*) after it sees its first
input digits, and one more digit every cycle after that. A multiplier can
therefore feed an adder tree digit by digit, and the whole chain costs one
word-time plus a few cycles per stage.

The SystemVerilog here implements the accelerator's datapath and control:

* a left-to-right serial-parallel multiplier (LR-SPM): the activation is serial, the weight parallel;
* a two-full-adder online adder, and reduction trees built from it;
* processing elements (PEs) of 16 multipliers and an adder tree;
* a 9 x 64 PE tile that computes a block of 64 output pixels of one output channel;
* 8 such tiles;
* input, kernel and output buffers;
* a control unit that sequences layers and passes.

With the default parameters the array holds 8 x 64 x 9 x 16 = 73,728
multipliers. It is the configuration described for the original 45 nm design:
input tiling Tn = 16, output tiling Tm = 8, row/column tiling Tr = Tc = 8 and
16-bit activations.

## 1. Number formats

**Signed digits.** Every serial wire carries one digit d in {-1, 0, +1} per cycle as
two bits `(pos, neg)`, with d = pos - neg (`dslr_pkg::sd_t`). Both `(0,0)` and `(1,1)`
mean zero. A stream d1, d2, ... stands for the fraction sum d_i 2^-i. Because
the digit set is redundant, a unit can commit to a leading digit before it has
seen all of its inputs. This is what makes left-to-right operation possible.

**Activations** are P = 16-bit two's-complement words A, meaning A / 2^P, which lies
in [-1/2, 1/2). Read most significant bit first, such a word is already a
signed-digit stream: the sign bit is digit 1 with value 0 or -1, and every
other bit is a digit 0 or +1. The input buffer therefore sends stored words
directly, bit by bit, without conversion.

**Weights** are (P+1)-bit two's complement W, meaning W / 2^P, in [-1, 1).

**Results.** The output buffer holds sum(A*W) / 2^P as a signed 32-bit integer. The
sum runs over the 9 kernel positions, the 16 channels of a group and all
input-channel groups accumulated so far. The result is short of the exact value
by at most 0.75 of an LSB per product, because each multiplier drops its final
residual.

## 2. The left-to-right multiplier (`lr_spm`)

For each new activation digit x(j+3) the multiplier computes

    v[j]   = 2 w[j] + W * x(j+3) / 4
    p(j+1) = SELM(estimate of v[j])
    w[j+1] = v[j] - p(j+1)

The residual 2w is kept in carry-save form, in two registers WS and WC. Each is
P+4 bits wide: 2 integer bits and P+2 fraction bits. One cycle does the following:

1. A selector picks W, its bitwise complement, or zero. For a -1 digit, a carry-in
   completes -W.
2. The selected word is sign-extended. Dividing by 4 only moves the binary point.
3. A 3:2 carry-save adder adds the word to WS and WC.
4. A 4-bit carry-propagate adder sums the top 4 bits of both carry-save words,
   giving an estimate with 2 integer and 2 fraction bits.
5. SELM chooses the digit: +1 if the estimate is at least 1/2, -1 if it is below
   -1/2, and 0 otherwise.
6. The chosen digit is subtracted at the units bit. After the following left shift
   this is just an inversion of that bit.
7. Both words shift left one place into WS and WC.

The carry-save estimate falls short of the true value by less than 1/2, which keeps
the residual within [-3/4, 3/4). The whole v then fits in the 2 integer bits, and the
4-bit estimate cannot wrap around.

The first two digit cycles are the initialisation stage: no digit is selected.
From the third cycle on, the unit emits one product digit per cycle. Product
digit 1 is selected in the cycle of input digit 3 (online delay 2). It appears on
the registered output one cycle later.

The control unit drives an input `rec_en` that marks the P recurrence cycles. This
way the 73,728 multipliers need no digit counters of their own.

## 3. The online adder and the trees (`lr_adder`, `lr_adder_tree`)

The adder is the classic borrow-save online adder, with two rows of full adders:

    FA1:  x+ + not(x-) + y+            = 2h + g     (position k)
    FA2:  g(k-1) + h + not(y-(k-1))    = 2t + w     (position k-1)
    z(k-2) = t - not(w(k-2))

Registers hold g and y- between the two rows. A latch delays w by one position,
and the output digit is registered. The constant offsets introduced by the two
complemented inputs cancel along the stream. So the state after `clr` (g = 1,
y- = 0, w = 0) is exactly the state that zero digits leave behind: zeros can
stream through a tree that is not in use.

The sum of two fractions in (-1, 1) needs one integer digit. That digit is
emitted as the first output digit, so **each adder halves the value and makes the
stream one digit longer**. A tree of depth L turns N streams of D digits into one
stream of D + L digits meaning sum / 2^L. When N is not a power of two, the odd
node goes through an adder whose other input is zero. Every path then has the
same delay (2 cycles per level) and the same scaling.

## 4. Array organisation

    tile t (t < TM = 8)      -> output channel og*8 + t
      column c (c < 64)      -> output pixel c of an 8 x 8 block (window c)
        PE r (r < 9)         -> kernel position r = ky*3 + kx of the 3 x 3 window
          lane n (n < 16)    -> input channel ig*16 + n

* **PE** (`dslr_pe`): 16 multipliers and a 4-level tree. Its result is
  sum_n A*W / 16.
* **Column** (`dslr_column`): 9 PEs and a 4-level tree (9 -> 5 -> 3 -> 2 -> 1).
  Its result stream has 16 + 4 + 4 = 24 digits and means the window's sum / 256.
* **Tile** (`dslr_tile`): 64 columns. All of them get the tile's filter; each gets
  its own window.
* **Sharing across tiles**: all 8 tiles share the 64 x 9 x 16 activation streams.

This mapping is this design's reading of the source description, which is not
self-consistent on this point. One passage says the 16 multipliers of a PE cover
16 input channels, and the cycle-count equation has separate tree depths for
log2(k*k) and log2(Tn). Another passage says the PE tree sums the k*k products.
The block diagram labels the kernel of each column as "Kernel j" (j = 1..64),
while the text says all PEs of a column share a kernel. The mapping above is
the one that fits the cycle-count equation, the tiling factors and the stated
number of multipliers (9 x 64 x 16 x 8).

## 5. One pass, cycle by cycle

A *pass* covers 64 output pixels x 8 output channels x 16 input channels x 9 kernel
positions. The cycles are counted from the clear (default sizes):

| cycle | what happens |
|---|---|
| 0 | `pe_clr`: clear the multipliers, adders and conversion registers; latch the weights of the pass (`kb_ld`) |
| 1 .. 16 | activation digits 1..16 are delivered; the precision counter `dig_idx` steps 0..15, then resets |
| 3 .. 18 | `rec_en`: the multipliers' recurrence; product digit i is visible in cycle i+3 |
| 12 | first digit out of the PE trees (4 levels x 2 cycles) |
| 20 .. 43 | the 24 column result digits enter the output buffer (`ob_shift`), Q <- 2Q + d |
| 44 | `commit`: Q is written to (first input group) or added to the stored sum |

The source's cycle equation counts, per pass,
delta_mult + delta_add*ceil(log2 9) + delta_add*log2 16 + P + ceil(log2 9) + log2 16
= 2 + 8 + 8 + 16 + 4 + 4 = 42 cycles. The RTL takes 43 cycles from the first
activation digit to the last result digit. The extra cycle is the multiplier's
output register. With the commit cycle, a pass occupies 45 cycles of the array,
plus whatever the data fetch takes. The equation's
ceil(R*C/64) x ceil(M/8) x ceil(N/16) pass count holds unchanged.

## 6. Control and the off-chip side

`control_unit` holds a table of up to 32 layers. For each layer it stores
`ngrp` = ceil(N/16) (input-channel groups), `nsp` = ceil(R*C/64) (spatial tiles)
and `nog` = ceil(M/8) (output groups). After `start` it runs

    for layer < num_layers:
      for og < nog:  for sp < nsp:  for ig < ngrp:
        FETCH   fetch_req until fetch_done
        RUN     45-cycle pass (table above)
        COMMIT  add to partial sums; if ig is the last group -> STORE
      STORE   store_req until store_done

then raises `done`. The off-chip memory, and the agent that moves data between it and
the buffers, are not part of the RTL. The accelerator talks to them through
two handshakes, each a level request held until a one-cycle done pulse:

* **fetch** (`fetch_req`, with `cur_layer/og/sp/ig`): the agent writes the 64 windows of
  the pass into the input buffer (`ib_wr_*`: bank = window, index = r*16 + n).
  * `fetch_kernels` is set on the first pass of an output group. The agent then
    also writes the filters of the 8 output channels, for all input groups, into the
    kernel buffer (`kb_wr_*`).
  * `fetch_src` is 0 for the first layer, whose data come from external memory,
    and 1 for later layers, whose inputs are the previous layer's results. Moving
    and re-windowing those results is left to the agent.
* **store** (`store_req`): the 8 x 64 results of the spatial tile are final. The
  agent reads them through `ob_rd_tile/ob_rd_col/ob_rd_data` and pulses `store_done`.

**Kernels larger than 3 x 3.** The array has 9 PE rows. A k x k kernel is run by splitting its
k*k taps into ceil(k*k/9) slices of 9 taps. Each slice is presented as one more
input group, with the matching activations in the windows. The output buffer
accumulates the slices like any other partial product. The layer table then gets
`ngrp` = ceil(N/16) * ceil(k*k/9). This is how the agent must map 11x11, 7x7 and 5x5
layers. The paper does not say how its 9-row array handles them.

## 7. Buffers

* `input_buffer`: 64 banks x 144 words x 16 bits, held in registers. During a pass
  it presents digit `dig_idx` of every word at once. With `dig_en` low, every digit
  is zero.
* `kernel_buffer`: 8 banks x NGRP = 32 groups x 144 words x 17 bits, plus the
  stationary 8 x 144-word register that feeds the multipliers for the whole pass.
  All input groups of an output group stay on chip, so the weights are loaded
  once per output group and reused over all of its spatial tiles.
* `output_buffer`: 8 x 64 entries. Each entry has a 25-bit conversion register
  (signed digits to two's complement, one add per digit) and a 32-bit partial sum.

All three are plain register arrays; there are no memory macros.

## 8. Sizes

| parameter | default | meaning |
|---|---|---|
| `TM` | 8 | tiles = output channels per pass |
| `COLS` | 64 | columns = output pixels per pass (Tr x Tc = 8 x 8) |
| `KK` | 9 | PEs per column = kernel positions (3 x 3) |
| `TN` | 16 | multipliers per PE = input channels per pass |
| `P` | 16 | activation precision in bits |
| `NGRP` | 32 | input groups stored per filter (512 channels) |
| `MAX_LAYERS` | 32 | layer-table entries |
| `OUT_W` | 32 | partial-sum width |

The convolution layers of AlexNet, VGG-16 and ResNet-18 all fit the defaults. The
largest per-filter need is 32 groups, for the 512-channel layers of VGG-16 and
ResNet-18; AlexNet's first layer needs 14 slices (11 x 11 taps, 3 channels).
Spatial and output-group counts stay well inside the 16-bit counters. A sum never
exceeds 4608 x 2^15 in magnitude, so it fits 32 bits.

## 9. Where this RTL departs from, or goes beyond, the source description

* The dataflow mapping of section 4 is a choice between conflicting statements.
* The multiplier's register widths, SELM thresholds and `rec_en` input are this
  design's. The published block diagram's widths (n+2 on the residual feedback,
  n-1 after the shift) are not used.
* The adder's inversion polarities follow the textbook borrow-save adder. They were
  not copied gate by gate from the diagram.
* These parts are undescribed and added here:
  * the conversion to two's complement;
  * accumulation over input groups in the output buffer;
  * the layer table;
  * the fetch/store handshakes;
  * splitting kernels larger than 3 x 3.
* Not built:
  * bias, ReLU and pooling (mentioned only as background);
  * the control unit's error detection and recovery (named, not described);
  * the data movement between layers;
  * the off-chip memory.
* One pass takes one cycle more than the source's equation (section 5).
* Weight stationarity is kept at the kernel-buffer level. The filters of an
  output group are fetched from off-chip once and stay in the kernel buffer for
  the whole output feature map. The multipliers' weight register, however, is
  reloaded from the kernel buffer at the start of every pass. It holds the
  input-channel group of the current pass, because the loop order walks the
  groups innermost.

## 10. Verification

Each block has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each compares the
block with an independent integer model and prints
`TB_RESULT checks=N failures=M`.

* Multiplier: 2,004 products, including the extreme operands, are within 3/4 LSB
  of exact. The first digit appears in cycle 4, and nothing comes before it or
  after the last digit.
* Adder and trees (N = 16 and N = 9): sums are exact, with the stated delays.
* PE and column: run at full size, within the truncation bound.
* Tile: reduced to 4 columns; each column is checked against its own window.
* Buffers: checked word by word, at full size for the input buffer.
* Control unit: the pass order, handshake flags and in-pass cycle positions of a
  two-layer run are checked.
* `tb_dslr_top`: runs the whole accelerator over two layers. It uses 2 tiles x
  4 columns with the full 9 x 16 PE shape. The testbench plays the off-chip side
  and checks all 40 outputs of every stored tile. It counts each control
  mechanism and fails if one never happens: fetch from memory, fetch from buffer,
  kernel fetch, accumulation over groups, precision-counter reset, store, layer
  increment, end.
* `tb_conv_layers`: runs two real convolution layers on 2 tiles x 8 columns.
  The testbench holds the feature maps and filters and cuts them into the
  windows of each pass, as a data-movement agent would.
  * Layer 0 is a 3x3 layer with 32 input channels (two input groups), 4 output
    channels and zero padding.
  * Layer 1 is a 5x5 layer whose input is layer 0's output, rescaled and fetched
    as on-chip data. Its 25 taps are run as three slices.
  * All 96 outputs are checked against a direct convolution. So are the number
    of passes (14) and stores (6), and the fact that large-kernel slices occur.

The full-size array (73,728 multipliers) lints cleanly. It is too large for a
Verilator simulation build on a 16 GB machine: lint alone flattens it into about
1.4 GB of C++ and uses 13 GB. The largest configuration simulated end to end is
the 2 x 8-column one of `tb_conv_layers`, 2,304 multipliers.

To simulate a block with Verilator (run from the directory that holds `rtl/`
and `tb/`):

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_dslr_top \
        rtl/dslr_pkg.sv rtl/*.sv tb/tb_dslr_top.sv -o sim
    ./obj_dir/sim

Change the sizes with the `localparam` line at the top of `tb_dslr_top.sv`.

## 11. Files

| file | contents |
|---|---|
| `rtl/dslr_pkg.sv` | signed-digit type `sd_t` and helpers |
| `rtl/lr_spm.sv` | left-to-right serial-parallel multiplier |
| `rtl/lr_adder.sv` | online adder |
| `rtl/lr_adder_tree.sv` | online reduction tree |
| `rtl/dslr_pe.sv` | processing element (16 multipliers + tree) |
| `rtl/dslr_column.sv` | 9 PEs + column tree |
| `rtl/dslr_tile.sv` | 64 columns |
| `rtl/input_buffer.sv` | activation windows, digit-serial read-out |
| `rtl/kernel_buffer.sv` | filters and stationary weight register |
| `rtl/output_buffer.sv` | digit-to-binary conversion and partial sums |
| `rtl/control_unit.sv` | layer table and pass sequencing |
| `rtl/dslr_top.sv` | the accelerator |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_conv_layers.sv` | two convolution layers (3x3 and 5x5) end to end |
