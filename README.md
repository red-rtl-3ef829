# RED: a ReRAM deconvolution engine in SystemVerilog

A deconvolution (transposed convolution) layer upsamples a feature map. The
textbook way to run one is to spread the input apart with `S-1` zeros
between pixels (stride `S`), pad the border, and convolve. On a ReRAM
crossbar accelerator that means feeding mostly zeros through the array. For
stride 2 about 87 % of the multiply-accumulates see a zero operand; for
stride 32 it is nearly all of them. RED removes that waste with two ideas,
and this RTL implements both:

* **Pixel-wise mapping.** The `K_H x K_W x C x M` kernel is not flattened
  into one tall crossbar. It is cut by kernel position into `K_H*K_W`
  sub-crossbars (SCs) of `C x M` cells each. SC `n = i*K_W + j` holds
  `W[i][j][:][:]`.
* **Zero-skipping data flow.** All SCs work at once. Each one gets the one
  *real* input pixel vector that its kernel position meets, never an inserted
  zero. Summing the SC results by *computation mode* yields `S*S` output
  pixels per compute step where the zero-inserting scheme yields one.

The default build is sized for the FCN-8s 2x upsampling layer: 16x16x21
input, 4x4x21x21 kernel, stride 2, 34x34x21 output. All sizes are
parameters.

## Computation modes: why every SC has exactly one job per tile

Number the zero-inserted ("padded") input so that real pixel `x` sits at
padded index `OFF + S*x`, with `OFF = K-1-PAD`. A plain convolution then
gives

    O[oh][ow][m] = sum_{i,j,c} Ipad[oh+i][ow+j][c] * W[i][j][c][m]

Kernel row `i` meets a real pixel only when `oh + i - OFF` is a multiple of
`S`. Group output rows into tiles of `S`, so `oh = S*t + a`. Then kernel row
`i` always serves the same in-tile offset and always reads the same input
row relative to the tile:

    a(i)     = (OFF - i) mod S
    shift(i) = (a(i) + i - OFF) / S        (exact; may be negative)
    input row read by kernel row i for tile t  =  t + shift(i)

Columns work the same way. So SC `(i,j)` contributes to exactly one pixel of
every `S x S` output tile, namely mode `(a(i), a(j))`, and for it reads input
pixel `(t + shift(i), u + shift(j))`. The modes partition the kernel. For the
3x3, stride-2, padding-1 case the four modes use kernel weights
{1,3,7,9}, {2,8}, {4,6} and {5} (numbered 1..9 row by row). A tile needs only
`span(shift)^2` distinct input vectors: 4 for a 3x3 or 4x4 kernel at stride
2, and 4 again for 16x16 at stride 8. SCs in the same kernel-row/column
group share a vector. These formulas live in `red_pkg` and are evaluated at
elaboration time; no index arithmetic is done at run time beyond adding the
tile index.

The result equals the zero-insertion algorithm exactly. The testbenches
check every output pixel against it.

## Datapath

```
 host ─► input buffer ──(NP read ports)──► zero-skip router ──► NU crossbar units
          (real pixels only)                (addresses, border   (WL driver → crossbar
                                             zeros, fan-out)       → shift adders)
                                                                        │ NU x M sums
 host ◄── output buffer (S*S banks, crop) ◄── mode adder (S*S x M) ◄────┘
                      ▲
               controller: tile / phase / bit-plane sequencing, start/done
```

| Module | Role |
|---|---|
| `red_pkg` | mode/shift formulas, output and tile counts |
| `red_crossbar` | **behavioural model** of the ReRAM array plus its read-out: `ROWS x COLS` signed cells, combinational bitline sums of the rows pulsed in this clock |
| `red_wl_driver` | captures an input vector, emits one bit-plane per clock (LSB first) |
| `red_shift_adder` | per-bitline shift-and-add over the bit-planes; the sign plane is subtracted (two's complement inputs) |
| `red_row_decoder` | one-hot row select for programming cells |
| `red_subcrossbar` | one SC: decoder + WL driver + crossbar + shift adders |
| `red_input_buffer` | input map store, `NP` combinational read ports |
| `red_zero_skip_router` | per tile: `NP` addresses, zeroes reads outside the image, routes a vector to every SC |
| `red_mode_adder` | sums the SC results of each mode; in fold mode adds the two phases |
| `red_output_buffer` | `S*S` banks, one per mode, so a tile is written in one clock; drops pixels past `O_H`/`O_W` |
| `red_controller` | raster walk over tiles, fold phases and bit-planes; gap-free loading; result tags; `start/busy/done`; clock counter |
| `red_top` | the whole engine |

### Timing

One *item* is one tile (or one fold phase of a tile). An item takes
`IN_BITS` clocks, one per input bit-plane. The wordline drivers of the next
item load at the edge that ends the current one, so items follow without
gaps. The shift adders present the sums one clock after the last plane. The
mode adder registers the tile one clock later, and the output buffer writes
it at the next edge. A whole layer takes

    cycles = ceil(O_H/S) * ceil(O_W/S) * FOLD * IN_BITS + 3

counted from the edge that samples `start` to the edge after `done`. For the
default layer that is 17*17*8 + 3 = 2315 clocks. The `cycles` output reports
the same number, and every testbench checks it.

### Area-efficient (folded) mode, `FOLD = 2`

Large kernels need many SCs: 256 for 16x16. With `FOLD = 2`, SCs `2q` and
`2q+1` share one crossbar of `2C` rows, giving `ceil(K_H*K_W/2)` crossbars.
Each tile then runs in two phases. In phase 0 the upper `C` rows get SC
`2q`'s vector and the lower rows zeros; phase 1 is the reverse. The mode
adder holds the phase-0 sums and adds the phase-1 sums. The cost is twice
the clocks per tile; the saving is half the crossbars and half of their
periphery. Weight programming follows the same mapping: `W[i][j][c][m]`
goes to unit `n/2`, row `(n%2)*C + c`.

## Using it

Ports of `red_top` (synchronous to `clk`, asynchronous active-low `rst_n`):

1. **Weights.** While idle, write each `W[prog_i][prog_j][prog_c][prog_m] =
   prog_data` with `prog_en` high, one per clock. The cells keep their values
   across layers and resets, as non-volatile cells do.
2. **Input.** Write each input pixel vector `I[in_h][in_w][0..C-1]` with
   `in_we`, one per clock. Channel `c` is `in_vec[c]`, signed `IN_BITS` bits.
3. **Run.** Pulse `start` with `cfg_ih`/`cfg_iw`, anywhere from 1 to
   `MAX_IH`/`MAX_IW`. `busy` stays high until `done` pulses. A `start` while
   busy is ignored.
4. **Read.** Set `rd_oh`/`rd_ow`; `rd_pix[m]` is the signed `ACC_W`-bit
   output `O[rd_oh][rd_ow][m]`, combinationally.

`dbg_tile_wr`, `dbg_wr_mask`, `dbg_border` and `dbg_fold_phase` are
one-clock strobes for observing write-backs, cropping, border fetches and
fold phases. Assertions in `red_top` and `red_controller` flag programming or
input writes during a run, out-of-range layer sizes and SC units that fall
out of lock-step.

Parameters: `KH, KW, S, PAD` (layer geometry, fixed at build time, as the
weights are), `C, M` (SC rows/columns), `FOLD` (1 or 2), `IN_BITS, W_BITS,
ACC_W` (widths), `MAX_IH, MAX_IW` (buffer sizes). Output size is
`O = S*(I-1) + K - 2*PAD`.

### Simulating

With Verilator 5, from the folder that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb rtl/red_pkg.sv tb/tb_red_top_full.sv \
              --top-module tb_red_top_full -Mdir obj && obj/Vtb_red_top_full

Every testbench prints `TB_RESULT checks=N failures=F` and stops on a
watchdog if the design hangs.

| Testbench | What it exercises |
|---|---|
| `tb_red_top_full` | default build, one complete 16x16x21 → 34x34x21 layer, all 24,276 outputs and the clock count |
| `tb_red_top` | three reduced builds: 3x3/stride 2/pad 1; 4x4/stride 2 folded; 5x5/stride 3 with cropping. Two back-to-back layers each; counts each mechanism and fails if one never occurs |
| `tb_red_workloads` | the other benchmark layers at their own kernel, stride and input size with fewer channels: 4x4/s2 (4x4 and 6x6 inputs), 5x5/s2 (8x8 and 4x4 inputs), and 16x16/s8 on a full 70x70 input (568x568 output) in folded form |
| `tb_red_<block>` | one per module, against models written in the testbench |

`red_top_harness` (in `tb/`) is the reusable end-to-end checker. Its
reference is a direct zero-insertion deconvolution, independent of the
mode/shift formulas.

## Which layers a build holds

A build holds a layer when its `KH, KW, S, PAD` match the layer and
`C, M, MAX_IH, MAX_IW` are at least as large.

| Layer | Input | Kernel | S | Default build |
|---|---|---|---|---|
| FCN 2x upsampling | 16x16x21 | 4x4x21x21 | 2 | yes, exactly |
| FCN 8x upsampling | 70x70x21 | 16x16x21x21 | 8 | no: needs `KH=KW=16, S=8, MAX_IH=MAX_IW=70` (256 SCs, or 128 with `FOLD=2`) |
| SNGAN (CIFAR-10 / STL-10) | 4x4x512 / 6x6x512 | 4x4x512x256 | 2 | no: needs `C=512, M=256, PAD=1` |
| DCGAN / Improved GAN | 8x8x512 / 4x4x512 | 5x5x512x256 | 2 | no: needs `KH=KW=5, C=512, M=256`; see padding below |

The two 5x5 layers map 8→16 and 4→8, which needs `PAD = 1.5` under
`O = S*(I-1)+K-2*PAD`. Such layers use unequal padding on the two sides. This
design has one symmetric `PAD`. With `PAD=1` it produces the 17x17 (9x9) map
that contains the wanted output, and the caller drops the extra row and
column.

## What is modelled and what is assumed

The crossbar is the one part that is not digital logic. `red_crossbar` is a
behavioural stand-in with the real part's interface: a weight per cell,
wordline pulses in, bitline values out. It assumes the following, none of
which is given in the published description:

* each cell stores a whole signed `W_BITS`-bit weight (real cells hold a few
  bits, and weights would be spread over several columns);
* the integrate-and-fire read-out is exact, with no ADC quantisation, noise
  or saturation;
* the column multiplexer is absent: every bitline has its own read lane.

The following are choices of this design, made where the architecture
description is silent:

* signed 8-bit inputs, applied bit-serially, LSB first;
* 8-bit weights and 32-bit accumulation;
* the buffers and their banking;
* the raster tile order and gap-free loading;
* the host interface;
* reset behaviour;
* the published data flow speaks of one "cycle" per batch of input
  vectors. Here that step is one item of `IN_BITS` clocks, because inputs
  enter the wordlines one bit-plane at a time;
* the published design sums the SCs of a mode for free, by stacking them on
  shared bitlines ("vertical sum-up"). Here the sum is a digital adder
  after the shift adders (`red_mode_adder`). The result is the same; only
  the place of the addition differs.

The original description shows the physical SC arrangement only in a
drawing, which this design does not reproduce. SCs here are numbered by the
mapping equation `n = i*K_W + j`, so the SC numbers of the published worked
example (SC1 to SC9 in "cycle 1") do not carry over. The per-SC input
assignment is derived from the zero-insertion algorithm, not copied. It
agrees with the published example: four distinct input vectors per cycle
for 3x3 at stride 2, and `stride^2` modes.

The published text and figure disagree on which weights the second mode
uses. The text says the horizontal step uses weights 4 and 6; the figure
marks 2 and 8. This design follows the figure, which is also what the
arithmetic gives: a horizontal step changes the column parity, so only the
middle column is active.

Not built: wordline/bitline analog drivers, the column multiplexer, the
integrate-and-fire circuit as a separate block, and the bank/chip level
above one layer engine (several banks, a global row buffer shared between
engines, inter-layer scheduling).
