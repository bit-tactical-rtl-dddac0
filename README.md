# TCLp: a weight-skipping, bit-serial CNN accelerator in SystemVerilog

Most of the multiply-accumulates in a convolutional layer do no useful work.
Pruning leaves many weights at zero, and most activations need far fewer than
16 bits. This design skips both kinds of waste without giving up a regular,
lock-step datapath.

- **Zero weights are removed ahead of time.** A software pass rewrites each
  filter's weights into a *schedule*. Where the dense stream holds a zero, the
  pass moves a later non-zero weight into the empty slot (a *promotion*).
  Each promoted weight carries a small select code. The code tells the
  hardware which activation the weight must now meet. The hardware does not
  search for work. It only has to route the right activation to each weight.
- **Activations are processed one bit per cycle.** Activations enter the
  multipliers serially, LSB first, so a multiplier becomes an AND gate. A
  step costs as many cycles as the activation with the highest set bit in
  that step needs. This count is worked out at run time for each block of
  activations.

The two savings multiply: fewer columns from weight skipping, fewer cycles
per column from precision. The configuration built here is the precision
variant with lookahead 2 and lookaside 5, written ⟨2,5⟩. Each weight picks
one of 8 candidate activations (a "MUX-8" select). The design has 4 tiles,
each computing 16 filters × 16 weight lanes over 16 windows in parallel, on
16-bit fixed-point data.

## Promotions and the schedule format

Take one filter and call the lane index `i` (input channel within a 16-channel
brick) and the dense step `s` (which brick of the filter window is being
processed). Without skipping, lane `i` at step `s` multiplies `W[s][i]` by
`A[s][i]`. A schedule column may instead hold, in lane `i`:

| select `ws` | weight taken from | activation it meets |
|---|---|---|
| 0 | own slot `W[s][i]` | `A[s][i]` |
| 1 .. h (lookahead) | `W[s+l][i]` | `A[s+l][i]` (same lane, l steps ahead) |
| h+1 .. h+d (lookaside) | `W[s+1][(i+j) mod N]` | `A[s+1][(i+j) mod N]` (neighbour lane j, one step ahead) |

With h=2 and d=5 the select code is 3 bits. A column also carries an
**ALC** (activation lane control) field. This is the number of dense steps the
activation window moves forward after the column: 1 for a normal column, up
to h+1 when the next steps' weights were all promoted away, and 0 when some
weights of the current step still remain to be processed. A weight-memory row
is therefore

```
[ ALC (2b) | ws[f][i] (3b x 256) | w[f][i] (16b x 256) ]     f = filter 0..15, i = lane 0..15
```

with weight `(f,i)` at bits `(f*16+i)*16`. The same schedule serves every
window group of the layer. The testbench package `tcl_tb_pkg` contains a
greedy scheduler that produces these rows. For each column it fills each
zero slot from lookahead distance 1..h first, then from lookaside 1..d. It
then sets ALC to the largest advance that leaves no unprocessed weight
behind.

Because every lane of every filter in a tile shares one column, lanes with
little work wait for the busiest one. The schedule's length is set by the
worst lane. This is the price of keeping the datapath in lock step.

## The activation side: buffer, select unit and window precision

Blocks of activations arrive as *blocks*: one dense step for all 16 windows,
16 × 16 activations, with the block's dynamic precision `p` (index of the
highest set bit over the whole block, plus one; 0 for an all-zero block).

* **Activation buffer** (`activation_buffer`): h+1 = 3 banks. Step `s` goes to
  bank `s mod 3`. Bank `j` feeds only activation block register `j` of the
  select unit, through its own read port. Each bank holds one block.
* **Activation select unit** (`asu`): three activation block registers (ABRs)
  used as a circular queue with a `head` pointer. ABR `j` always holds a step
  congruent to `j` mod 3, so `A[·][l]`, lookahead distance `l`, is ABR
  `(head+l) mod 3`. When a column finishes, `head` moves by ALC. The ABRs that
  fell out of the window are refilled on the same edge if their bank already
  holds the next block; otherwise they wait, and the tile stalls until
  `win_ready`. Steps beyond the end of the filter are filled with zeros, so
  the last columns of a group need no data from the buffer.
* **Window precision**: a column can touch any activation in the lookahead
  window. So it runs for `max(1, max(p of the 3 ABRs))` cycles, presenting bit
  `b` of every activation in cycle `b`.

## Inside a tile

`tile` holds a 16 × 16 grid of (filter, window) pairs. Each pair has a
`wsu_slice` and an `ip_unit`:

* `wsu_slice`: for each of the 16 lanes, an 8-to-1 multiplexer. It picks the
  activation bit named by `ws` from the candidates above. An AND gate then
  passes the 16-bit weight or zero.
* `ip_unit`: a 16-input adder tree. Its sum is shifted left by the current
  bit position and added to a 40-bit accumulator.

The weights and select codes of a column are shared along a filter row. The
activation bits are shared down a window column.

`tile_ctrl` runs the layer one *window group* at a time. A group is one
output row and 16 consecutive output x positions. For each group the
controller does the following:

1. It flushes the ASU, clears the accumulators and reads the first column.
2. It spends `max(1,p)` cycles per column. On the last bit it advances the
   window by ALC and reads the next column. The weight memory's output
   register is the column register, so the next column is ready on the
   following cycle, with no bubble.
3. It stops when the window start passes the last dense step. It then hands
   the 16 × 16 results to `output_buffer`, which is double-buffered against
   the next group.

`output_buffer` shifts each result right by `out_shift`, applies ReLU and
saturates to 16 bits. It then writes one 16-channel brick per window into the
tile's AM slice. Windows past the end of the row (a partial last group) are
computed on zeros and never written.

Timing of one column: exactly `max(1,p)` cycles when the ASU is ready. There
are 2 cycles of overhead per window group: one for the flush and first read,
one for the hand-off. The cycle counts are checked against this formula in
`tb_tile` and `tb_tcl_top`.

## Several tiles: activation memory slices and the broadcast

All tiles work on the same windows with different filters, so they all need
the same activation blocks. The activation memory is split into one slice per
tile. Brick `cb` (channels `16cb .. 16cb+15`) of input position `(x,y)` is
stored

```
slice  = cb mod TILES
address = in_base + (y*AX + x) * ceil(CB/TILES) + cb div TILES
```

Tile `t` computes output channels `16*(fgroup*TILES + t) ..`. It writes them as
brick `fgroup*TILES+t` of each output position, which by the same rule lies in
its own slice:
`out_base + (oy*OX + ox)*out_cbs + fgroup` with `out_cbs = ceil(K/(16*TILES))`.
The output of one layer is thus already laid out as the input of the next.

Each slice has a `dispatcher`. It walks the dense steps in the order
(output row, window group, fy, fx, cb), with `cb` innermost. For each step
whose brick its slice owns, it reads the 16 windows' bricks (one per cycle),
masks them to the layer's precision and computes the block precision. It then
offers the block. `act_broadcast` takes the blocks from the owning dispatcher
in step order and offers each one to every tile. Each tile accepts at its own
pace, and the next block goes out once all tiles have taken the current one.
So a tile that is busy on a long column holds back the others by no more than
the buffer allows.

## The layer descriptor

`tcl_pkg::layer_t` describes one convolution (one filter group of up to
`TILES*FILTERS` = 64 filters):

| field | meaning |
|---|---|
| `ax, ay` | input width and height (already padded, if the layer pads) |
| `cb` | input channel bricks, `ceil(C/16)` |
| `fx, fy, stride` | filter size and stride |
| `ox, oy` | output size, `(ax-fx)/stride+1` etc. |
| `prec` | profiled precision of this layer's activations, in bits |
| `out_shift` | fixed-point scaling of the results |
| `out_cbs, fgroup` | output bricks per position, this filter group's index |
| `in_base, out_base` | AM slice addresses of input and output |
| `wm_base` | first schedule column of this filter group in WM |

The number of dense steps is `fx*fy*cb`. Layers with more than 64 filters run
once per filter group, each with its own `wm_base` and `fgroup`.

## Parameters

| parameter | default | |
|---|---|---|
| `TILES` | 4 | tiles, AM slices, dispatchers |
| `FILTERS` | 16 | filters per tile |
| `LANES` | 16 | weight lanes per filter (channels per brick) |
| `WINDOWS` | 16 | windows processed together |
| `LOOKAHEAD` (h) | 2 | |
| `LOOKASIDE` (d) | 5 | |
| `WM_DEPTH` | 4096 | columns per tile (2 MB of 16-bit weights) |
| `AM_DEPTH` | 32768 | bricks per slice (4 MB in total) |

Widths of the accumulator (40 b), step counters (16 b) and addresses are set
in `tcl_pkg`. `FILTERS` must equal `LANES`, because a tile's output brick
becomes an input brick of the next layer.

## What is not here, and where this design departs

* The variant that processes only the *non-zero bits* of activations is
  not assembled. That variant uses modified-Booth "oneffsets" and shifters
  instead of AND gates. Only its front end, `offset_generator`, exists, as a
  stand-alone unit. It recodes each activation into non-adjacent signed
  powers of two: 0x008F becomes +2^7 +2^4 -2^0. It streams one term per lane
  per cycle, and the lanes of a group stay in step. It outputs absolute
  5-bit powers rather than short relative shifts.
* The weight scheduler is software. It exists only in the testbench
  package, as a simple greedy pass.
* The dispatcher does no zero padding. A padded layer must have its input
  stored padded. The written output is unpadded, so chaining padded layers
  needs a re-layout by the host.
* The first layer of an image network (3 input channels, a single brick per
  position) puts every brick in slice 0. With 32768 bricks per slice, a
  224×224 or 227×227 input does not fit, although the total memory would hold
  it. The later layers of AlexNet, GoogLeNet and ResNet-50 fit.
* Lookaside lane `i+j` wraps modulo 16 (lanes numbered 0..15).
* The memories are plain arrays. No eDRAM/SRAM macros, no bank timing.
* The activation buffer holds one block per bank (1.5 KB per tile).
* Fully connected layers are not sequenced by the controller. They are a
  1×1 convolution with a single window, which the controller can run, but
  that uses only one of the 16 window columns.
* Loading WM/AM and reading results go through simple host ports, which are
  usable while the accelerator is idle.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_wsu_slice`, `tb_ip_unit` | mux/AND selection for all codes; adder tree, signed terms, bit shift |
| `tb_weight_memory`, `tb_activation_memory` | read/write, read-register hold |
| `tb_activation_buffer`, `tb_asu` | bank steering, back-pressure; head/ALC advance, refill, zero fill, window precision, stalls |
| `tb_dispatcher`, `tb_act_broadcast` | brick addresses, trimming, block precision, step order; ordered broadcast with tiles accepting at different times |
| `tb_output_buffer`, `tb_tile_ctrl` | scaling/ReLU/saturation and addresses; per-column cycle counts, ALC advance, group ends, waits |
| `tb_offset_generator` | terms rebuild each activation, are non-adjacent and minimal in number; group cycles = max(1, most terms in a lane) |
| `tb_tile` | a small tile (4 lanes × 4 filters × 2 windows) against a direct convolution, with bit-cycle counts per group |
| `tb_tcl_top` | the full-size design (no parameter overrides) end to end |

`tb_tcl_top` loads a 3×3 layer with 64 input channels and 64 filters (about
70 % zero weights, activations from 0 to 16 bits, some above the layer's
12-bit precision) on a 20×3 input. It runs the layer and compares all
18 × 64 outputs with a direct convolution. It also compares each tile's
bit-serial cycles per window group with the formula above. It counts, and
requires, lookahead and lookaside promotions, multi-step advances, ASU
stalls, broadcast back-pressure, precision trimming, reduced and zero
window precision, and a partial window group.

Run any testbench with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/tcl_pkg.sv tb/tcl_tb_pkg.sv rtl/*.sv tb/tb_tcl_top.sv \
    --top-module tb_tcl_top -Mdir obj_top
./obj_top/Vtb_tcl_top
```

The full-size build takes a minute or two. The simulation itself takes well
under a second.
