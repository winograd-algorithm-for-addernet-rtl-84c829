# A Winograd AdderNet layer engine

An AdderNet layer does not multiply a filter by an input patch. It measures
how far apart the two are: each output is minus the sum of absolute
differences (the l1 distance) between the weights and the input values.
Additions cost much less than multiplications, and this engine cuts their
number further with a Winograd fast algorithm. For a 3x3 layer, the
F(2x2,3x3) form computes each 2x2 block of outputs from one 4x4 block of
input. The ordinary Winograd algorithm multiplies two 4x4 matrices element by
element. Here that step becomes an element-wise l1 distance:

    Y = A^T [ -| G (-) B^T d B | ] A

- `d` is a 4x4 tile of the zero-padded input map.
- `B^T d B` is the input transform.
- `G` is a 4x4 kernel for each (output channel, input channel) pair. It is
  stored and trained directly in this transformed ("Winograd") domain.
- `(-)` and `|.|` are the element-wise difference and absolute value.
- The sum over input channels is taken before the output transform `A`.

Counted per output pixel and channel pair, this takes about 8 additions. A
plain adder layer takes 18. Because the absolute value breaks the
distributive law, the result is not the same as the plain adder layer. The
network has to be trained in this form.

The engine computes one such layer on a 28 x 28 map with 16 input and 16
output channels and 8-bit data. Its adder array holds 256 subtract-and-absolute
lanes, one for every pair of input and output channels. All sizes are
parameters.

## The two transforms

The input transform uses the standard F(2,3) matrix:

    B^T = [ 1  0 -1  0 ]
          [ 0  1  1  0 ]
          [ 0 -1  1  0 ]
          [ 0  1  0 -1 ]

Each row has exactly two non-zero entries. So element (i,j) of `B^T d B` is a
signed sum of four pixels of the tile, needing three adders and no
multiplier. `wino_pkg::bt_idx` and `bt_neg` give the column and sign of the
two entries of each row.

The output transform does not use the standard `A`. In the standard matrix,
different columns have different numbers of +1 and -1 entries. Every adder
result is negative, so the four outputs of a tile would have different
typical sizes, which leaves a visible grid pattern in the feature maps. There
are exactly four matrices in which every column of `A` has the same
number of each sign. They are listed here as `A^T`:

    A_0^T = [-1  1  1  0 ; 0  1 -1  1]      A_1^T = [-1 -1  1  0 ; 0 -1 -1  1]
    A_2^T = [ 1 -1 -1  0 ; 0 -1  1 -1]      A_3^T = [ 1  1 -1  0 ; 0  1  1 -1]

`A_0` is the default. Parameter `A_SEL` (0..3) selects another one. Switching
matrix changes the kernel transform `G` but not `B`. No kernel transform
exists in hardware, because the kernel is loaded already in the Winograd
domain. So `B` is the same for all four.

Output pixel (r,c) of a tile is `sum_ij A^T(r,i) * A^T(c,j) * M(i,j)`. Every
coefficient is +1, -1 or 0, so each of the four outputs adds, subtracts or
skips each element of `M`. Nine of the 16 elements reach each output.

## Dataflow and schedule

The layer runs as four stages, one after another. Each stage covers the whole
layer and hands its full result to the next stage through a buffer. With
`T = (H/2)*(W/2)` tiles (196 at the default size):

| stage | module | reads | writes | cycles | default |
|---|---|---|---|---|---|
| padding | `pad_unit` | input map, 1 pixel/cycle | (H+2)x(W+2) padded map | (H+2)(W+2) | 900 |
| input transform | `input_transform` | 4 padded pixels/cycle | one V element/cycle | 16T | 3136 |
| calculation | `adder_calc` | one V element and the matching kernel words/cycle | one M element/cycle | 16T + 4 | 3140 |
| output transform | `output_transform` | one M element/cycle | one 2x2 tile every 16 cycles | 16T | 3136 |

A layer therefore takes 10312 cycles at the default size, not counting
loading and unloading. These stage lengths match the cycle counts reported
for the FPGA version of this design. They set the schedule: one item per
cycle per stage, plus four cycles of adder-array pipeline.

Each stage works on every channel at once, so one "item" is a vector:

- 16 input channels in the padding stage and the input transform;
- 16 x 16 channel pairs in the adder array;
- 16 output channels in the output transform.

Tiles are 4x4 windows of the padded map at a stride of 2 in both directions.
They go in raster order, and so do the 16 elements inside a tile. The
transformed-tile buffer and the result buffer are both addressed
`tile*16 + 4*i + j`.

`wino_ctrl` starts the next stage in the same cycle as the previous stage's
`done` pulse, so no cycle is lost between stages. The `stage` output shows
the running stage. Running the stages at the same time, one tile behind each
other, would roughly halve the latency. That overlap is **not** built: the
stage buffers would have to become ping-pong or FIFO buffers.

All buffers are instances of `wino_ram`. It has one write port and any number
of read ports, and reads are combinational, as in FPGA distributed RAM. The
input transform uses four read ports on the padded map. The adder array uses
16 read ports on the kernel buffer, one per output channel.

## The adder array

`adder_calc` is the largest block. It handles one Winograd element `e` of one
tile per cycle, with this pipeline:

1. **Issue.** Read `V(c,e)` for all 16 input channels, and the 16 kernel
   words `G(o,.,e)`, one per output channel.
2. **S1.** Register the operands.
3. **S2.** 256 lanes compute `|G(o,c,e) - V(c,e)|` and register it.
4. **S3.** Sum groups of four input channels and register the partial sums.
5. **S4.** Add the groups, negate, and register the result.
   `M(o,e) = -sum_c |G - V|` is written to the result buffer.

The four register stages give the four-cycle latency in the 3140-cycle count.
Where the adder tree is cut into stages is this design's choice. The
local parameter `GS` is the group size. If it does not divide `CIN`, the last
group is partial.

## Number formats

Inputs and kernel values are 8-bit two's complement (`DW`). Every
intermediate value keeps full precision, so no stage can overflow and
nothing is rounded:

| value | width at DW = 8, CIN = 16 | rule |
|---|---|---|
| input pixel, kernel value | 8 signed | DW |
| V = B^T d B | 10 signed | DW + 2 (sum of four) |
| \|G - V\| | 11 unsigned | DW + 3 |
| M = -sum over CIN | 16 signed | DW + 3 + log2(CIN) + 1 |
| Y | 20 signed | M + 4 (sum of nine) |

The engine does not rescale the outputs back to 8 bits, and it has no batch
normalisation or activation. The output port returns the 20-bit sums.

## Using the engine

Top module: `wino_adder_top`. Parameters: `H`, `W` (even), `CIN`, `COUT`,
`DW`, `A_SEL`. Everything is synchronous to `clk`. Reset is synchronous and
active low (`rst_n`), and resets only the control state.

1. **Input map.** Write pixel (y,x) with `in_we`, `in_waddr = y*W + x` and
   `in_wdata`. Channel c is in bits `[c*DW +: DW]`.
2. **Kernel.** For Winograd element e = 4i+j and output channel o, write
   address `e*COUT + o` with `w_we`/`w_waddr`/`w_wdata`. Input channel c is
   in bits `[c*DW +: DW]`.
3. **Run.** Pulse `go` for one cycle while `busy` is low. `layer_done` pulses
   in the last cycle of the layer, and `busy` is low again in the next cycle.
   Another `go` may follow at once.
4. **Read.** Set `out_row`/`out_col`. `out_rdata` returns all COUT channels of
   that pixel in the same cycle, channel o in bits `[o*YW +: YW]`.

Do not write the buffers while `busy` is high. An assertion checks this. The
input map and the kernel stay in their buffers, so a layer can be rerun with
only one of them changed.

## How far it follows the algorithm, and what is its own

These parts come from the algorithm and its published FPGA evaluation:

- the transform matrices;
- the l1 replacement of the product;
- the 16 x 16 parallelism;
- the 8-bit data;
- the four stages, and the length of each in cycles.

These parts are this design's own choices:

- the buffers between stages and their port counts;
- the order in which tiles and elements are processed;
- the start/done handshake;
- the internal word widths;
- the way the adder tree is split into pipeline stages;
- the host interface.

The published work does not give these details. The FPGA resource and energy
figures are not reproduced.

The engine is a single-layer engine of fixed size. It cannot run a whole
network, such as the CIFAR ResNet-20/32 or ImageNet ResNet-18 models the
algorithm was evaluated on. Those need other map sizes, more than 16
channels, stride-2 layers and a way to split layers into pieces, and none of
that is described or built.

## Simulation

Each module has a self-checking testbench in `tb/`. Each one computes its
expected values from the matrices themselves, not from the RTL's tables. Each
ends by printing `TB_RESULT checks=N failures=M`. To build and run one with
Verilator:

    verilator --binary --timing --assert -Irtl rtl/wino_pkg.sv \
      rtl/wino_ram.sv rtl/pad_unit.sv rtl/input_transform.sv rtl/adder_calc.sv \
      rtl/output_transform.sv rtl/wino_ctrl.sv rtl/wino_adder_top.sv \
      tb/tb_wino_adder_top.sv --top-module tb_wino_adder_top
    ./obj_dir/Vtb_wino_adder_top

The testbenches:

- **`tb_wino_adder_top`** runs the engine at its default size. It runs four
  layers: random data, the all-extreme case (inputs -128, kernel +127), and
  two random layers started back to back. It compares all 12544 outputs of
  each checked layer with an integer reference model. It also checks the
  900/3136/3140/3136 stage lengths. It counts border pixels, copied pixels,
  finished tiles and layers, and fails if any of these never happens.
  Building it takes a few minutes; the simulation takes under a second.
- **`tb_pad_unit`**, **`tb_input_transform`**, **`tb_adder_calc`** and
  **`tb_output_transform`** test the stages at small sizes. They check every
  word each stage writes, and the stage length. `tb_output_transform` runs
  all four matrices `A_0..A_3` side by side. It also checks their balance: a
  constant input must give four equal outputs per tile. The standard `A`
  would give -9 times the constant at one position and other values
  elsewhere.
- **`tb_wino_ctrl`** checks the stage order and the start/done timing against
  stage units of random length.
- **`tb_wino_ram`** checks the buffer's ports.

## Files

| file | contents |
|---|---|
| `rtl/wino_pkg.sv` | stage enum, width functions, `B^T` and `A_k^T` tables |
| `rtl/wino_ram.sv` | buffer RAM, 1 write / N combinational read ports |
| `rtl/pad_unit.sv` | zero padding |
| `rtl/input_transform.sv` | `B^T d B`, one element per cycle |
| `rtl/adder_calc.sv` | 256-lane l1 adder array, 4-stage pipeline |
| `rtl/output_transform.sv` | `A^T M A` with a selectable balanced matrix |
| `rtl/wino_ctrl.sv` | stage sequencer |
| `rtl/wino_adder_top.sv` | the engine |
| `tb/tb_*.sv` | one self-checking testbench per module |
